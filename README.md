# A Bayesian complex-valued LeNet-5 accelerator with switchable dropout

Complex-valued neural networks (CVNNs) work directly on data that is
complex by nature, such as radar returns, SAR images and communication
signals. Each weight and activation has a real and an imaginary part. A
plain CVNN gives a prediction but says nothing about how sure it is. This
design runs a *Bayesian* CVNN that gives a measure of uncertainty with
every answer. It uses Monte-Carlo dropout. Dropout layers stay on at
inference, so each forward pass samples a different sub-network. The
network runs S = 3 times on the same input. The mean of the three
outputs is the prediction, and their standard deviation is the
uncertainty.

A complex network adds one question that a real network does not have:
**which part of the data does a dropout layer act on?** This design
supports three answers per dropout ("Bayesian") layer:

| config | real part | imaginary part | dropout engines busy |
|--------|-----------|----------------|----------------------|
| `BAYES_R` | dropped | passed | 1 |
| `BAYES_I` | passed | dropped | 1 |
| `BAYES_B` | dropped | dropped (independent mask) | 2 |
| `BAYES_NONE` | passed | passed | 0 |

A network with N Bayesian layers therefore has 3^N ways to place its
dropout. The best choice is found offline, for example by an
evolutionary search that trades accuracy, calibration and the number of
active dropout engines. It is not obvious in advance: mixed
configurations such as I-I-B or R-B-R can beat dropping both parts
everywhere. The hardware does not fix the choice. Every Bayesian layer
has one dropout engine per part, each behind a switch, and the switches
are a run-time input (`bayes_cfg`). `BAYES_NONE` is an addition of this
design. It turns a Bayesian layer off, so the same build also runs
single-Bayesian-layer and fully deterministic variants of the network.

## The network and how data moves through it

The top, `bayes_cvnn_top`, implements a complex LeNet-5. Every arrow
carries complex 16-bit words.

```
 X (1x32x32)
  -> conv1 6@5x5  -> Bayesian layer 1 -> CReLU ->  A (6x28x28)
  -> pool1 2x2 max                              ->  B (6x14x14)
  -> conv2 16@5x5 -> Bayesian layer 2 -> CReLU ->  A (16x10x10)
  -> pool2 2x2 max                              ->  B (16x5x5 = 400)
  -> fc1 400->120 -> Bayesian layer 3 -> CReLU ->  A (120)
  -> fc2 120->84                      -> CReLU ->  B (84)
  -> fc3 84->10   -> Monte-Carlo aggregator  -> mean, std per class and part
```

Each layer has its own hardware block and weight memory (W1 to W5). The
layers run one after another. Two feature-map buffers, A and B, take turns
as source and destination, and the input image stays in X so each pass
can read it again. A layer block reads its source buffer and emits a
stream of `(valid, index, complex value)` beats. The Bayesian layer and
the activation transform that stream on the fly, one element per cycle,
and it is written into the destination buffer at its index. The
sequencer waits until a layer reports `done` and its stream has emptied
(a fixed drain of 6 cycles), then starts the next layer.

A run has this order:

1. Every enabled dropout engine draws a fresh channel mask (state
   `S_MASK`). This takes one cycle per channel, up to 120 cycles for the
   fc1 layer.
2. conv1 … fc3 run. The fc3 outputs go into the aggregator's running
   sums.
3. Steps 1 and 2 repeat until S passes have run. Then the aggregator
   streams 10 results and `done` pulses.

## Channel dropout engine (`bernoulli_dropout`)

This is the block that makes the network Bayesian. It works in three
phases:

* **Initialisation.** `keep_rate = 1 − drop_rate`. Rates are Q0.8
  fractions, so `drop_rate = 64` means 0.25. keep_rate is held as
  `256 − drop_rate` in 9 bits, which lets `drop_rate = 0` keep everything
  at exactly 1.0.
* **Mask generation.** A 32-bit xorshift generator (shifts 13, 17 and 5)
  advances once per channel. Its top 8 bits give a uniform number u, and
  the channel is kept when `u < keep_rate`. An N-channel mask takes N
  cycles.
* **Dropping.** Each element maps to its channel as
  `c = index / PLANE`, because feature maps are stored channel-major. The
  output is `mask[c] ? (x · keep_rate) >>> 8 : 0`. The path accepts one
  element per cycle with one cycle of latency.

Whole channels are dropped, not single elements. For a fully connected
layer a "channel" is one neuron (PLANE = 1).

**Kept values are multiplied by keep_rate, not divided by it.** Most
dropout implementations divide by keep_rate so the expected activation
stays the same. The algorithm this design follows writes a
multiplication, and the RTL does the same. Weights trained with the usual
inverted dropout need to be rescaled, or `(x << 8) / keep` substituted in
`bernoulli_dropout` (one line).

`complex_dropout_layer` holds two such engines with different seeds.
`cfg` closes the real-part switch for R or B and the imaginary-part
switch for I or B. A part whose switch is open goes through a register
with the same one-cycle delay, so the stream timing does not depend on
the configuration. An engine that is switched off draws no masks. Its
`mask_done` is replaced by a pulse one cycle after the request.

## Two ways to map complex arithmetic onto engines

A complex multiply needs four real products: `WR·AR`, `WR·AI`, `WI·AR`
and `WI·AI`. Then `re = WR·AR − WI·AI` and `im = WR·AI + WI·AR`. The
parameter `MAPPING` (type `mapping_t`) selects one of two mappings. It
reaches every layer block through the top:

* **`LATENCY_OPT`** (default). `complex_mac_engine` has four multipliers,
  one per product, and an add/subtract stage. It accepts one complex MAC
  per cycle. The result appears 2 cycles after the last pair of a dot
  product. CReLU and max pooling each have two engines, one per part.
* **`RESOURCE_OPT`**. There are two multipliers, a "real engine" that
  multiplies by WR and an "imag engine" that multiplies by WI. In the
  first cycle both take the real input part AR, and the accumulators add
  `WR·AR` to re and `WI·AR` to im. In the second cycle both take AI:
  `WI·AI` is subtracted from re and `WR·AI` is added to im. So a MAC
  takes two cycles, and the result appears 3 cycles after the last pair.
  An assertion checks that inputs come no faster than every second cycle.
  CReLU and pooling share one engine that handles the real part and then
  the imaginary part.

The conv and FC layers issue one MAC every `II` cycles, where II is 1 or
2 depending on MAPPING. RESOURCE_OPT therefore halves the multipliers and
roughly doubles the run time. The end-to-end tests measure 1,269,402
cycles for a three-pass run in LATENCY_OPT and 2,537,874 in RESOURCE_OPT.

Loop order and addressing:

* conv: loops `oc, oy, ox, ic, ky, kx`. Weight address
  `((oc·IN_C + ic)·K + ky)·K + kx`, input address
  `ic·H·W + (oy+ky)·W + (ox+kx)`. Valid padding, stride 1.
* FC: loops `o, i`. Weight address `o·IN_N + i`.
* Max pooling: 2×2 windows with stride 2, over the real and imaginary
  parts separately.
* Outputs come out in `oc, oy, ox` order, which is the channel-major
  order the next layer expects.

## Prediction and uncertainty (`mc_aggregator`)

For every class and each part, the aggregator keeps a 64-bit sum `s` and
a 64-bit sum of squares `q` of the S samples. After the last pass it
streams one class every 34 cycles:

```
mean = s / S                                  (truncating division)
std  = isqrt( (S·q − s²) / S² )               (population std, clamped to 32767)
```

The hardware computes `isqrt(S·q − s²) / S`. For integers this equals
the formula above exactly, and it needs no wide divider. For each class, a
load cycle forms `S·q − s²` for both parts. Two digit-by-digit square-root
units then produce one result bit per cycle for 32 cycles. A final cycle
divides by the constant S and registers the result. The square of a Q8.8
value is Q16.16, and its square root is Q8.8 again, so `std` has the same
format as `mean`. The real and imaginary parts get separate statistics. With every
Bayesian layer off, all passes are the same and `std` is exactly 0. The
testbench checks this.

## Number format

* Data and weights are 16-bit signed Q8.8 (`cvnn_pkg::DATA_W`, `FRAC`).
* Products are Q16.16 and go into 40-bit accumulators (`ACC_W`).
* A layer's result is shifted right by 8 bits (arithmetic shift, so it
  rounds towards −∞) and saturated to 16 bits (`acc_to_data`).
* Activation is CReLU: ReLU on each part.
* There are no bias terms.

All of these are choices of this design; the widths are parameters in
`cvnn_pkg`.

## Using the top

| port | meaning |
|------|---------|
| `ld_valid, ld_sel, ld_addr, ld_data` | write one complex word. `ld_sel` 0 is the input image (`y·32 + x`). 1 to 5 are the weights of conv1, conv2, fc1, fc2 and fc3, in the layouts above. Loading during a run is an assertion failure. |
| `bayes_cfg[3]` | configuration of Bayesian layers 1 to 3 (after conv1, conv2 and fc1) |
| `drop_rate[3]` | Q0.8 drop rate of each Bayesian layer |
| `start` | pulse that begins a run of S passes |
| `busy`, `done` | `busy` is high during a run. `done` pulses with the last result. |
| `res_valid, res_idx, res_mean, res_std` | 10 results, one every 34 cycles, at the end of a run |

Inputs must be held while `busy` is high. The dropout generators keep
their state from run to run. Running the same input twice therefore gives
two different samples. A reset brings back the seed sequence.

The network sizes (image size, kernel, channel and neuron counts, S) are
parameters of the top. The buffer and weight-memory depths follow from
them.

## How this relates to the published accelerator

Followed:

* the complex conv, FC, activation and pooling layer classes;
* the four-sub-operation complex MAC, and the latency-opt and
  resource-opt mappings with the real input first;
* switchable per-part dropout engines;
* the channel-wise dropout algorithm, including the multiply by
  keep_rate;
* three Monte-Carlo samples, with the mean as prediction and the standard
  deviation as uncertainty;
* three Bayesian layers in the LeNet model, with per-layer R/I/B choice.

Chosen here, because the published description leaves them open:

* the LeNet-5 layer sizes, the classic ones for a 28×28 MNIST image
  padded to 32×32;
* the positions of the three Bayesian layers;
* the number format, the random number generator, the use of ReLU and of
  max pooling, and the absence of biases;
* the buffer organisation and the load interface.

**Speed.** The published accelerators come from high-level synthesis
with unrolled loops. They reach 0.27 ms for a shallower ComplexLeNet
variant at 181 MHz. This RTL has one MAC engine per layer and runs the
layers in sequence. A three-pass run takes about 1.27 M cycles, or
7.0 ms at 181 MHz. The two mapping schemes are faithful in structure and
in their 1:2 throughput ratio, but they are not tuned for the same
absolute latency. Unrolling would mean several MAC engines per layer
working on different output channels, with banked buffers. That is not
done here.

**Not included:**

* the search for configurations (offline software);
* any host interface, such as a bus, DMA or external memory, because none
  was described;
* top-level networks for the larger radar and SAR models (5 and 10 conv
  layers). Their layer sizes are unknown. The layer blocks are
  parameterised and can be put together into such networks.

## Files

`rtl/`:

* `cvnn_pkg.sv`: types, enums and the saturating shift;
* `xorshift_rng.sv`, `bernoulli_dropout.sv` and
  `complex_dropout_layer.sv`: dropout;
* `complex_mac_engine.sv`, `complex_conv_layer.sv`,
  `complex_fc_layer.sv`, `complex_activation.sv` and
  `complex_maxpool.sv`: layers;
* `cplx_ram.sv`: a one-write, one-read memory with registered read, used
  for every buffer;
* `mc_aggregator.sv` and `bayes_cvnn_top.sv`.

`tb/`:

* Each block has a self-checking `tb_<module>.sv`. It compares against
  values computed in the testbench and prints
  `TB_RESULT checks=N failures=M`.
* `bcvnn_ref_pkg.sv` is a bit-exact SystemVerilog model of the whole
  network, including the random generators.
* `tb_bayes_cvnn_top.sv` runs the full-size top in LATENCY_OPT through
  seven configurations: B-B-B, I-I-B and R-B-R, each with its own
  per-layer drop rates, then R-none-none, I-none-none, B-none-none and
  none-none-none. It compares every mean and
  std with the model, checks the cycle count, and counts each mechanism
  to make sure it happened: R, I and B engines active, a layer switched
  off, channels dropped and kept, non-zero and zero uncertainty.
* `tb_bayes_cvnn_top_resopt.sv` runs the same test in RESOURCE_OPT.
* `tb_fc_mapping_sweep.sv` runs a 128-input complex FC layer with 128,
  256, 512 and 1024 outputs under both mappings. It checks the results
  and the cycle counts.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`, for a
block testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/cvnn_pkg.sv rtl/<block and its sub-modules>.sv tb/tb_<block>.sv \
    --top-module tb_<block>
./obj_dir/Vtb_<block>
```

For the top, give all of `rtl/*.sv` (package first), then
`tb/bcvnn_ref_pkg.sv` and `tb/tb_bayes_cvnn_top.sv`. One full-size run of
seven configurations takes about ten seconds. Every testbench has a
watchdog that fails the test if it hangs.
