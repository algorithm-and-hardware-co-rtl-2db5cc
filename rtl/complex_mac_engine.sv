// complex_mac_engine: complex multiply-accumulate core shared by the complex
// convolutional and fully connected layers.
//
// A complex product W*A needs four real sub-operations: WR*AR, WR*AI, WI*AR
// and WI*AI; the real result is WR*AR - WI*AI and the imaginary result is
// WR*AI + WI*AR. The paper offers two mappings of these, both built here and
// chosen with MAPPING:
//   * LATENCY_OPT: four real engines, one per sub-operation, work in parallel
//     and an addition/subtraction stage combines them. One complex MAC is
//     accepted every cycle (initiation interval 1).
//   * RESOURCE_OPT: one "real" engine (multiplies by WR) and one "imag" engine
//     (multiplies by WI). The real part of the input is processed in the first
//     cycle and the imaginary part in the second, reusing the same weights.
//     One complex MAC is accepted every two cycles (initiation interval 2).
// Each engine is a signed DATA_W x DATA_W multiplier feeding an ACC_W-bit
// accumulator; these widths are choices of this design.
//
// Interface: `in_valid` offers one (w, a) pair; `first` clears the
// accumulators before this pair is added, `last` marks the final pair of a
// dot product. `out_valid` pulses for one cycle with the finished sums in
// `acc`, two cycles after the `last` pair (LATENCY_OPT) or three cycles
// after it (RESOURCE_OPT).
module complex_mac_engine
  import cvnn_pkg::*;
#(
  parameter mapping_t MAPPING = LATENCY_OPT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   first,
  input  logic   last,
  input  cplx_t  w,
  input  cplx_t  a,
  output logic   out_valid,
  output cacc_t  acc
);

  localparam int II = (MAPPING == LATENCY_OPT) ? 1 : 2;

  acc_t acc_re, acc_im;

  if (MAPPING == LATENCY_OPT) begin : g_latency_opt
    // Stage 1: four real engines in parallel.
    acc_t p_rr, p_ri, p_ir, p_ii;
    logic s1_v, s1_first, s1_last;
    acc_t sum_re, sum_im;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        p_rr <= '0; p_ri <= '0; p_ir <= '0; p_ii <= '0;
        s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0;
      end else begin
        p_rr     <= acc_t'(w.re) * acc_t'(a.re);
        p_ri     <= acc_t'(w.re) * acc_t'(a.im);
        p_ir     <= acc_t'(w.im) * acc_t'(a.re);
        p_ii     <= acc_t'(w.im) * acc_t'(a.im);
        s1_v     <= in_valid;
        s1_first <= first;
        s1_last  <= last;
      end
    end

    // Stage 2: addition and subtraction into the accumulators.
    always_comb begin
      sum_re = (s1_first ? acc_t'(0) : acc_re) + p_rr - p_ii;
      sum_im = (s1_first ? acc_t'(0) : acc_im) + p_ri + p_ir;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc_re <= '0; acc_im <= '0; out_valid <= 1'b0; acc <= '0;
      end else begin
        out_valid <= s1_v && s1_last;
        if (s1_v) begin
          acc_re <= sum_re;
          acc_im <= sum_im;
          if (s1_last) acc <= '{re: sum_re, im: sum_im};
        end
      end
    end
  end else begin : g_resource_opt
    // Captured operands, reused over the two cycles.
    cplx_t wq, aq;
    logic  q_first, q_last, ph1, ph2;
    data_t opnd;              // input part fed to both engines this cycle
    acc_t  e_real, e_imag;    // engine real: WR*opnd, engine imag: WI*opnd
    acc_t  sum_re, sum_im;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wq <= '0; aq <= '0; q_first <= 1'b0; q_last <= 1'b0;
        ph1 <= 1'b0; ph2 <= 1'b0;
      end else begin
        ph1 <= in_valid;
        ph2 <= ph1;
        if (in_valid) begin
          wq <= w; aq <= a; q_first <= first; q_last <= last;
        end
      end
    end

    always_comb begin
      opnd   = ph1 ? aq.re : aq.im;
      e_real = acc_t'(wq.re) * acc_t'(opnd);
      e_imag = acc_t'(wq.im) * acc_t'(opnd);
      if (ph1) begin        // cycle 1: real input
        sum_re = (q_first ? acc_t'(0) : acc_re) + e_real;
        sum_im = (q_first ? acc_t'(0) : acc_im) + e_imag;
      end else begin        // cycle 2: imaginary input
        sum_re = acc_re - e_imag;
        sum_im = acc_im + e_real;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc_re <= '0; acc_im <= '0; out_valid <= 1'b0; acc <= '0;
      end else begin
        out_valid <= ph2 && q_last;
        if (ph1 || ph2) begin
          acc_re <= sum_re;
          acc_im <= sum_im;
        end
        if (ph2 && q_last) acc <= '{re: sum_re, im: sum_im};
      end
    end

    assert property (@(posedge clk) disable iff (!rst_n) in_valid |=> !in_valid)
      else $error("complex_mac_engine: resource-opt accepts one pair every two cycles");
  end

  initial assert (II == 1 || II == 2);

endmodule
