// complex_dropout_layer: the Bayesian layer of a complex-valued network.
//
// A complex feature map has a real and an imaginary part, and dropout can be
// applied to either part or to both. This gives the three configurations of
// the paper: R (real part only), I (imaginary part only) and B (both parts).
// As in the paper, the layer holds one Bernoulli dropout engine per part, each
// behind a switch; `cfg` sets the switches. A part whose switch is open passes
// through unchanged (delayed by the same one cycle as the engine, so both
// parts stay aligned). The extra NONE setting opens both switches; it lets one
// generated accelerator also run layers that the chosen configuration leaves
// without dropout.
//
// The two engines use different seeds, so when both are on (B) the real and
// imaginary masks are drawn independently. `mask_start` redraws the masks of
// the engines that are switched on; `mask_done` pulses when they are done (at
// once, one cycle later, when no engine is switched on).
//
// Timing: one element per cycle in, one cycle latency; mask generation takes
// N_CHAN cycles.
module complex_dropout_layer
  import cvnn_pkg::*;
#(
  parameter int          N_CHAN  = 6,
  parameter int          PLANE   = 784,
  parameter logic [31:0] SEED_RE = 32'h1357_9BDF,
  parameter logic [31:0] SEED_IM = 32'h2468_ACE1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bayes_cfg_t        cfg,
  input  logic [RATE_W-1:0] drop_rate,
  input  logic              mask_start,
  output logic              mask_done,
  input  cbeat_t            in_beat,
  output cbeat_t            out_beat
);

  logic sw_re, sw_im;
  assign sw_re = (cfg == BAYES_R) || (cfg == BAYES_B);
  assign sw_im = (cfg == BAYES_I) || (cfg == BAYES_B);

  logic             busy_re, busy_im, done_re, done_im;
  logic             v_re, v_im;
  logic [IDX_W-1:0] idx_re, idx_im;
  data_t            d_re, d_im;
  cbeat_t           pass;
  logic             gen_pending, none_done;

  bernoulli_dropout #(.N_CHAN(N_CHAN), .PLANE(PLANE), .SEED(SEED_RE)) u_drop_re (
    .clk, .rst_n, .drop_rate,
    .mask_start(mask_start && sw_re),
    .mask_busy (busy_re),
    .mask_done (done_re),
    .in_valid  (in_beat.valid && sw_re),
    .in_idx    (in_beat.idx),
    .in_data   (in_beat.data.re),
    .out_valid (v_re),
    .out_idx   (idx_re),
    .out_data  (d_re)
  );

  bernoulli_dropout #(.N_CHAN(N_CHAN), .PLANE(PLANE), .SEED(SEED_IM)) u_drop_im (
    .clk, .rst_n, .drop_rate,
    .mask_start(mask_start && sw_im),
    .mask_busy (busy_im),
    .mask_done (done_im),
    .in_valid  (in_beat.valid && sw_im),
    .in_idx    (in_beat.idx),
    .in_data   (in_beat.data.im),
    .out_valid (v_im),
    .out_idx   (idx_im),
    .out_data  (d_im)
  );

  // Bypass register for a part whose switch is open.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pass <= '0;
    else        pass <= in_beat;
  end

  always_comb begin
    out_beat         = pass;
    out_beat.data.re = sw_re ? d_re : pass.data.re;
    out_beat.data.im = sw_im ? d_im : pass.data.im;
  end

  // Both engines start together and need the same number of cycles, so the
  // layer is done when every enabled engine has signalled done.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_pending <= 1'b0;
      none_done   <= 1'b0;
    end else begin
      none_done <= mask_start && !sw_re && !sw_im;
      if (mask_start && (sw_re || sw_im)) gen_pending <= 1'b1;
      else if (mask_done)                 gen_pending <= 1'b0;
    end
  end

  assign mask_done = none_done ||
                     (gen_pending && (!sw_re || done_re) && (!sw_im || done_im) &&
                      (done_re || done_im));

  // The engine outputs must stay in step with the bypass register.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (sw_re -> (v_re == pass.valid && idx_re == pass.idx)) &&
                   (sw_im -> (v_im == pass.valid && idx_im == pass.idx)))
    else $error("complex_dropout_layer: engine and bypass paths out of step");

  logic unused;
  assign unused = busy_re ^ busy_im;

endmodule
