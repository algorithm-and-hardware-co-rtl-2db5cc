// bernoulli_dropout: channel-wise Bernoulli dropout engine for one real-valued
// part (the real or the imaginary part) of a complex feature map.
//
// It follows the three phases of the paper's dropout algorithm:
//   * initialisation: keep_rate = 1 - drop_rate; the mask holds one bit per
//     channel (N_CHAN bits);
//   * mask generation: after a pulse on `mask_start` the engine walks the
//     channels, one per cycle, and sets mask[i] = (uniform_random < keep_rate).
//     `mask_busy` is high for N_CHAN cycles, `mask_done` pulses at the end;
//   * drop operations: every element arriving on the input stream is mapped to
//     its channel with index2channel(i) = i / PLANE (feature maps are stored
//     channel-major, PLANE = H*W elements per channel), replaced by zero if the
//     channel is dropped, and multiplied by keep_rate, exactly as the paper's
//     pseudocode writes it (output = temp x keep_rate).
// Rates are Q0.RATE_W fractions: drop_rate = 64 means 0.25 and keep_rate is
// held as 2^RATE_W - drop_rate so that drop_rate = 0 keeps everything at 1.0.
// The fixed-point format, the rounding (truncation towards minus infinity) and
// the xorshift generator are choices of this design.
//
// Timing: the drop path has a latency of one cycle and accepts one element per
// cycle. The mask must not be regenerated while elements are flowing; a new
// mask is drawn once per Monte-Carlo forward pass.
module bernoulli_dropout
  import cvnn_pkg::*;
#(
  parameter int          N_CHAN = 6,          // n_chan of the paper
  parameter int          PLANE  = 784,        // elements per channel
  parameter logic [31:0] SEED   = 32'h1234_5678
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [RATE_W-1:0] drop_rate,
  input  logic              mask_start,
  output logic              mask_busy,
  output logic              mask_done,
  input  logic              in_valid,
  input  logic [IDX_W-1:0]  in_idx,
  input  data_t             in_data,
  output logic              out_valid,
  output logic [IDX_W-1:0]  out_idx,
  output data_t             out_data
);

  localparam int CW = (N_CHAN > 1) ? $clog2(N_CHAN) : 1;

  logic [RATE_W:0]     keep_rate;
  logic [N_CHAN-1:0]   mask_array;
  logic [CW-1:0]       gen_ch;
  logic [RATE_W-1:0]   uniform_random;
  logic [IDX_W-1:0]    chan;
  logic signed [DATA_W+RATE_W+1:0] scaled;

  assign keep_rate = (RATE_W+1)'(1 << RATE_W) - {1'b0, drop_rate};

  xorshift_rng #(.SEED(SEED)) u_rng (
    .clk  (clk),
    .rst_n(rst_n),
    .step (mask_busy),
    .rnd  (uniform_random)
  );

  // Mask generation: one channel per cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_array <= '1;
      mask_busy  <= 1'b0;
      mask_done  <= 1'b0;
      gen_ch     <= '0;
    end else begin
      mask_done <= 1'b0;
      if (mask_start && !mask_busy) begin
        mask_busy <= 1'b1;
        gen_ch    <= '0;
      end else if (mask_busy) begin
        mask_array[gen_ch] <= ({1'b0, uniform_random} < keep_rate);
        if (int'(gen_ch) == N_CHAN-1) begin
          mask_busy <= 1'b0;
          mask_done <= 1'b1;
        end else begin
          gen_ch <= gen_ch + 1'b1;
        end
      end
    end
  end

  // Drop operations: index2channel, zeroing and scaling by keep_rate.
  assign chan   = in_idx / IDX_W'(PLANE);
  assign scaled = $signed(in_data) * $signed({1'b0, keep_rate});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_idx   <= in_idx;
      if (int'(chan) < N_CHAN && mask_array[CW'(chan)])
        out_data <= data_t'(scaled >>> RATE_W);
      else
        out_data <= '0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && mask_busy))
    else $error("bernoulli_dropout: data arrived while the mask was being generated");

endmodule
