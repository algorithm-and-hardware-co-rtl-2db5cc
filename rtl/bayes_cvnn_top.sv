// bayes_cvnn_top: accelerator for a dropout-based Bayesian complex-valued
// LeNet-5 (Bayesian ComplexLeNet5), with Monte-Carlo sampling and on-chip
// uncertainty estimation.
//
// Network (every value complex, one layer hardware block per layer):
//   input  1 x IMG x IMG                     (buffer X)
//   conv1  C1 channels, K x K  -> Bayesian layer 1 -> CReLU      (buffer A)
//   pool1  2x2 max                                               (buffer B)
//   conv2  C2 channels, K x K  -> Bayesian layer 2 -> CReLU      (buffer A)
//   pool2  2x2 max                                               (buffer B)
//   fc1    F1 outputs          -> Bayesian layer 3 -> CReLU      (buffer A)
//   fc2    F2 outputs                              -> CReLU      (buffer B)
//   fc3    NCLS outputs                            -> Monte-Carlo aggregator
// Each Bayesian layer is a complex dropout layer whose switches are set at
// run time by `bayes_cfg[i]`: dropout in the real part (R), the imaginary part
// (I), both (B) or, for a layer the chosen configuration leaves out, none.
// So one build runs any of the 4^3 mixes, among them the paper's three-layer
// searched configurations (such as I-I-B or R-B-R) and its single-layer study
// with dropout only after conv1.
//
// Sampling: one run performs S forward passes. Before each pass every enabled
// dropout engine draws a new channel mask, so each pass samples a different
// sub-network; the layers then execute one after another, each layer's output
// stream passing through its dropout and activation stages into a ping-pong
// feature-map buffer (A/B). The input image is kept in buffer X and read again
// by each pass. After the last pass the aggregator streams, per class and per
// part, the mean (prediction) and standard deviation (uncertainty).
//
// MAPPING selects the paper's latency-opt scheme (four real engines per
// conv/FC layer, two engines per activation/pooling layer) or its
// resource-opt scheme (two shared engines per conv/FC layer, one per
// activation/pooling layer, real and imaginary input in consecutive cycles).
//
// What follows the paper: the layer classes and their two mappings, the
// R/I/B dropout switches, channel-wise Bernoulli dropout with
// output = kept input x keep_rate, S = 3 samples and mean/standard deviation
// as prediction/uncertainty. Choices of this design: the LeNet-5 layer sizes
// (the classic ones), the positions of the three Bayesian layers (after conv1,
// conv2 and fc1), 16-bit Q8.8 arithmetic, ReLU and 2x2 max pooling, no biases,
// layer-after-layer execution with one MAC engine per layer, and the load
// port below.
//
// Interface:
//   ld_valid/ld_sel/ld_addr/ld_data  write one complex word into a buffer:
//       ld_sel 0 = input image X[y][x], 1..5 = weights of conv1, conv2,
//       fc1, fc2, fc3 (layouts as in complex_conv_layer / complex_fc_layer).
//       Loads must not overlap a run.
//   bayes_cfg[i], drop_rate[i]  configuration and Q0.8 drop rate of Bayesian
//                     layer i+1 (after conv1, conv2, fc1); held during a run
//   start (pulse)     begins S passes with the current bayes_cfg and drop_rate
//   busy / done       busy during a run; done pulses after the last result
//   res_*             NCLS results, one every 34 cycles, at the end of a run
//                     (res_idx is IDX_W bits wide like every stream index;
//                     with 10 classes its upper 12 bits are constant zero)
// Timing (LATENCY_OPT, default sizes): about 417k MAC cycles per pass, plus
// mask generation (at most max(C1, C2, F1) cycles) and a few cycles of
// pipeline drain per layer; RESOURCE_OPT roughly doubles the conv/FC time.
module bayes_cvnn_top
  import cvnn_pkg::*;
#(
  parameter mapping_t MAPPING = LATENCY_OPT,
  parameter int       S       = 3,
  parameter int       IMG     = 32,
  parameter int       K       = 5,
  parameter int       C1      = 6,
  parameter int       C2      = 16,
  parameter int       F1      = 120,
  parameter int       F2      = 84,
  parameter int       NCLS    = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_valid,
  input  logic [2:0]        ld_sel,
  input  logic [IDX_W-1:0]  ld_addr,
  input  cplx_t             ld_data,
  input  bayes_cfg_t        bayes_cfg [3],
  input  logic [RATE_W-1:0] drop_rate [3],
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              res_valid,
  output logic [IDX_W-1:0]  res_idx,
  output cplx_t             res_mean,
  output cplx_t             res_std
);

  // ------------------------------------------------------------------
  // Derived sizes
  // ------------------------------------------------------------------
  localparam int H1   = IMG - K + 1;          // conv1 output side
  localparam int P1   = H1 / 2;               // pool1 output side
  localparam int H2   = P1 - K + 1;           // conv2 output side
  localparam int P2   = H2 / 2;               // pool2 output side
  localparam int FIN  = C2 * P2 * P2;         // fc1 inputs
  localparam int NX   = IMG * IMG;
  localparam int NA   = C1 * H1 * H1;         // largest user of buffer A
  localparam int NB   = C1 * P1 * P1;
  localparam int NW1  = C1 * K * K;
  localparam int NW2  = C2 * C1 * K * K;
  localparam int NW3  = F1 * FIN;
  localparam int NW4  = F2 * F1;
  localparam int NW5  = NCLS * F2;
  localparam int XAW  = $clog2(NX);
  localparam int AAW  = $clog2(NA);
  localparam int BAW  = $clog2(NB);
  localparam int DRAIN = 6;                   // cycles for dropout/activation to empty

  localparam logic [31:0] SEED_1R = 32'h9E37_79B9, SEED_1I = 32'h7F4A_7C15;
  localparam logic [31:0] SEED_2R = 32'h85EB_CA6B, SEED_2I = 32'hC2B2_AE35;
  localparam logic [31:0] SEED_3R = 32'h27D4_EB2F, SEED_3I = 32'h1656_67B1;

  // ------------------------------------------------------------------
  // Sequencer
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    S_IDLE, S_MASK, S_CONV1, S_POOL1, S_CONV2, S_POOL2,
    S_FC1, S_FC2, S_FC3, S_NEXT, S_RESULT
  } state_t;

  state_t           state;
  logic             layer_start, layer_done_seen;
  logic [3:0]       drain_cnt;
  logic [$clog2(S+1)-1:0] pass;
  logic [2:0]       mask_seen;
  logic             mask_go;
  logic [2:0]       mask_done;

  logic conv1_done, pool1_done, conv2_done, pool2_done, fc1_done, fc2_done, fc3_done;
  logic conv1_busy, pool1_busy, conv2_busy, pool2_busy, fc1_busy, fc2_busy, fc3_busy;
  logic agg_done;
  logic cur_done;

  always_comb begin
    unique case (state)
      S_CONV1: cur_done = conv1_done;
      S_POOL1: cur_done = pool1_done;
      S_CONV2: cur_done = conv2_done;
      S_POOL2: cur_done = pool2_done;
      S_FC1:   cur_done = fc1_done;
      S_FC2:   cur_done = fc2_done;
      S_FC3:   cur_done = fc3_done;
      default: cur_done = 1'b0;
    endcase
  end

  function automatic state_t next_layer(state_t s);
    unique case (s)
      S_CONV1: return S_POOL1;
      S_POOL1: return S_CONV2;
      S_CONV2: return S_POOL2;
      S_POOL2: return S_FC1;
      S_FC1:   return S_FC2;
      S_FC2:   return S_FC3;
      default: return S_NEXT;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; layer_start <= 1'b0; layer_done_seen <= 1'b0;
      drain_cnt <= '0; pass <= '0; mask_seen <= '0; mask_go <= 1'b0;
      done <= 1'b0;
    end else begin
      layer_start <= 1'b0;
      mask_go     <= 1'b0;
      done        <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MASK; pass <= '0; mask_go <= 1'b1; mask_seen <= '0;
        end
        S_MASK: begin
          mask_seen <= mask_seen | mask_done;
          if (&(mask_seen | mask_done)) begin
            state <= S_CONV1; layer_start <= 1'b1; layer_done_seen <= 1'b0;
          end
        end
        S_CONV1, S_POOL1, S_CONV2, S_POOL2, S_FC1, S_FC2, S_FC3: begin
          if (cur_done) begin
            layer_done_seen <= 1'b1; drain_cnt <= '0;
          end else if (layer_done_seen) begin
            if (int'(drain_cnt) == DRAIN-1) begin
              layer_done_seen <= 1'b0;
              state <= next_layer(state);
              if (state != S_FC3) layer_start <= 1'b1;
            end else begin
              drain_cnt <= drain_cnt + 1'b1;
            end
          end
        end
        S_NEXT: begin
          if (int'(pass) == S-1) state <= S_RESULT;
          else begin
            pass <= pass + 1'b1; state <= S_MASK; mask_go <= 1'b1; mask_seen <= '0;
          end
        end
        S_RESULT: if (agg_done) begin
          state <= S_IDLE; done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ------------------------------------------------------------------
  // Buffers
  // ------------------------------------------------------------------
  logic [XAW-1:0]   x_raddr;
  logic [AAW-1:0]   a_raddr, a_waddr;
  logic [BAW-1:0]   b_raddr, b_waddr;
  logic [$clog2(NW1)-1:0] w1_raddr;
  logic [$clog2(NW2)-1:0] w2_raddr;
  logic [$clog2(NW3)-1:0] w3_raddr;
  logic [$clog2(NW4)-1:0] w4_raddr;
  logic [$clog2(NW5)-1:0] w5_raddr;
  cplx_t x_rdata, a_rdata, b_rdata, w1_rdata, w2_rdata, w3_rdata, w4_rdata, w5_rdata;
  cplx_t a_wdata, b_wdata;
  logic  a_we, b_we;

  cplx_ram #(.DEPTH(NX))  u_buf_x (.clk, .we(ld_valid && ld_sel == 3'd0), .waddr(XAW'(ld_addr)),
                                   .wdata(ld_data), .raddr(x_raddr), .rdata(x_rdata));
  cplx_ram #(.DEPTH(NA))  u_buf_a (.clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata),
                                   .raddr(a_raddr), .rdata(a_rdata));
  cplx_ram #(.DEPTH(NB))  u_buf_b (.clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
                                   .raddr(b_raddr), .rdata(b_rdata));
  cplx_ram #(.DEPTH(NW1)) u_w1 (.clk, .we(ld_valid && ld_sel == 3'd1), .waddr($bits(w1_raddr)'(ld_addr)),
                                .wdata(ld_data), .raddr(w1_raddr), .rdata(w1_rdata));
  cplx_ram #(.DEPTH(NW2)) u_w2 (.clk, .we(ld_valid && ld_sel == 3'd2), .waddr($bits(w2_raddr)'(ld_addr)),
                                .wdata(ld_data), .raddr(w2_raddr), .rdata(w2_rdata));
  cplx_ram #(.DEPTH(NW3)) u_w3 (.clk, .we(ld_valid && ld_sel == 3'd3), .waddr($bits(w3_raddr)'(ld_addr)),
                                .wdata(ld_data), .raddr(w3_raddr), .rdata(w3_rdata));
  cplx_ram #(.DEPTH(NW4)) u_w4 (.clk, .we(ld_valid && ld_sel == 3'd4), .waddr($bits(w4_raddr)'(ld_addr)),
                                .wdata(ld_data), .raddr(w4_raddr), .rdata(w4_rdata));
  cplx_ram #(.DEPTH(NW5)) u_w5 (.clk, .we(ld_valid && ld_sel == 3'd5), .waddr($bits(w5_raddr)'(ld_addr)),
                                .wdata(ld_data), .raddr(w5_raddr), .rdata(w5_rdata));

  // ------------------------------------------------------------------
  // Layers
  // ------------------------------------------------------------------
  logic [AAW-1:0] p1_raddr, f2_raddr;
  logic [AAW-1:0] p2_raddr;
  logic [BAW-1:0] c2_raddr, f1_raddr, f3_raddr;
  cbeat_t conv1_o, pool1_o, conv2_o, pool2_o, fc1_o, fc2_o, fc3_o;
  cbeat_t bl1_o, bl2_o, bl3_o, act1_o, act2_o, act3_o, act4_o;

  complex_conv_layer #(.IN_C(1), .IN_H(IMG), .IN_W(IMG), .OUT_C(C1), .K(K), .MAPPING(MAPPING))
    u_conv1 (.clk, .rst_n, .start(layer_start && state == S_CONV1), .busy(conv1_busy),
             .done(conv1_done), .ifm_addr(x_raddr), .ifm_data(x_rdata),
             .w_addr(w1_raddr), .w_data(w1_rdata), .out_beat(conv1_o));

  complex_dropout_layer #(.N_CHAN(C1), .PLANE(H1*H1), .SEED_RE(SEED_1R), .SEED_IM(SEED_1I))
    u_bayes1 (.clk, .rst_n, .cfg(bayes_cfg[0]), .drop_rate(drop_rate[0]), .mask_start(mask_go),
              .mask_done(mask_done[0]), .in_beat(conv1_o), .out_beat(bl1_o));

  complex_activation #(.MAPPING(MAPPING)) u_act1 (.clk, .rst_n, .in_beat(bl1_o), .out_beat(act1_o));

  complex_maxpool #(.C(C1), .H(H1), .W(H1), .MAPPING(MAPPING))
    u_pool1 (.clk, .rst_n, .start(layer_start && state == S_POOL1), .busy(pool1_busy),
             .done(pool1_done), .ifm_addr(p1_raddr), .ifm_data(a_rdata), .out_beat(pool1_o));

  complex_conv_layer #(.IN_C(C1), .IN_H(P1), .IN_W(P1), .OUT_C(C2), .K(K), .MAPPING(MAPPING))
    u_conv2 (.clk, .rst_n, .start(layer_start && state == S_CONV2), .busy(conv2_busy),
             .done(conv2_done), .ifm_addr(c2_raddr), .ifm_data(b_rdata),
             .w_addr(w2_raddr), .w_data(w2_rdata), .out_beat(conv2_o));

  complex_dropout_layer #(.N_CHAN(C2), .PLANE(H2*H2), .SEED_RE(SEED_2R), .SEED_IM(SEED_2I))
    u_bayes2 (.clk, .rst_n, .cfg(bayes_cfg[1]), .drop_rate(drop_rate[1]), .mask_start(mask_go),
              .mask_done(mask_done[1]), .in_beat(conv2_o), .out_beat(bl2_o));

  complex_activation #(.MAPPING(MAPPING)) u_act2 (.clk, .rst_n, .in_beat(bl2_o), .out_beat(act2_o));

  complex_maxpool #(.C(C2), .H(H2), .W(H2), .MAPPING(MAPPING), .IFM_AW(AAW))
    u_pool2 (.clk, .rst_n, .start(layer_start && state == S_POOL2), .busy(pool2_busy),
             .done(pool2_done), .ifm_addr(p2_raddr), .ifm_data(a_rdata), .out_beat(pool2_o));

  complex_fc_layer #(.IN_N(FIN), .OUT_N(F1), .MAPPING(MAPPING), .IFM_AW(BAW))
    u_fc1 (.clk, .rst_n, .start(layer_start && state == S_FC1), .busy(fc1_busy),
           .done(fc1_done), .ifm_addr(f1_raddr), .ifm_data(b_rdata),
           .w_addr(w3_raddr), .w_data(w3_rdata), .out_beat(fc1_o));

  complex_dropout_layer #(.N_CHAN(F1), .PLANE(1), .SEED_RE(SEED_3R), .SEED_IM(SEED_3I))
    u_bayes3 (.clk, .rst_n, .cfg(bayes_cfg[2]), .drop_rate(drop_rate[2]), .mask_start(mask_go),
              .mask_done(mask_done[2]), .in_beat(fc1_o), .out_beat(bl3_o));

  complex_activation #(.MAPPING(MAPPING)) u_act3 (.clk, .rst_n, .in_beat(bl3_o), .out_beat(act3_o));

  complex_fc_layer #(.IN_N(F1), .OUT_N(F2), .MAPPING(MAPPING), .IFM_AW(AAW))
    u_fc2 (.clk, .rst_n, .start(layer_start && state == S_FC2), .busy(fc2_busy),
           .done(fc2_done), .ifm_addr(f2_raddr), .ifm_data(a_rdata),
           .w_addr(w4_raddr), .w_data(w4_rdata), .out_beat(fc2_o));

  complex_activation #(.MAPPING(MAPPING)) u_act4 (.clk, .rst_n, .in_beat(fc2_o), .out_beat(act4_o));

  complex_fc_layer #(.IN_N(F2), .OUT_N(NCLS), .MAPPING(MAPPING), .IFM_AW(BAW))
    u_fc3 (.clk, .rst_n, .start(layer_start && state == S_FC3), .busy(fc3_busy),
           .done(fc3_done), .ifm_addr(f3_raddr), .ifm_data(b_rdata),
           .w_addr(w5_raddr), .w_data(w5_rdata), .out_beat(fc3_o));

  mc_aggregator #(.N_OUT(NCLS), .S(S))
    u_agg (.clk, .rst_n, .clear(start && state == S_IDLE), .in_beat(fc3_o),
           .sample_done(state == S_NEXT), .res_valid, .res_idx, .res_mean, .res_std,
           .all_done(agg_done));

  // ------------------------------------------------------------------
  // Buffer port multiplexing: one layer is active at a time.
  // ------------------------------------------------------------------
  always_comb begin
    unique case (state)
      S_POOL2: a_raddr = p2_raddr;
      S_FC2:   a_raddr = f2_raddr;
      default: a_raddr = p1_raddr;
    endcase
    unique case (state)
      S_FC1:   b_raddr = f1_raddr;
      S_FC3:   b_raddr = f3_raddr;
      default: b_raddr = c2_raddr;
    endcase
  end

  always_comb begin
    cbeat_t wa, wb;
    unique case (state)
      S_CONV2: wa = act2_o;
      S_FC1:   wa = act3_o;
      default: wa = act1_o;
    endcase
    unique case (state)
      S_POOL2: wb = pool2_o;
      S_FC2:   wb = act4_o;
      default: wb = pool1_o;
    endcase
    a_we    = wa.valid && (state == S_CONV1 || state == S_CONV2 || state == S_FC1);
    a_waddr = AAW'(wa.idx);
    a_wdata = wa.data;
    b_we    = wb.valid && (state == S_POOL1 || state == S_POOL2 || state == S_FC2);
    b_waddr = BAW'(wb.idx);
    b_wdata = wb.data;
  end

  // ------------------------------------------------------------------
  // Checks
  // ------------------------------------------------------------------
  assert property (@(posedge clk) disable iff (!rst_n) !(ld_valid && busy))
    else $error("bayes_cvnn_top: load during a run");
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({conv1_busy, pool1_busy, conv2_busy, pool2_busy,
                             fc1_busy, fc2_busy, fc3_busy}))
    else $error("bayes_cvnn_top: two layers active at once");

  initial begin
    assert (NA >= C2 * H2 * H2 && NA >= F1) else $error("buffer A too small");
    assert (NB >= C2 * P2 * P2 && NB >= F2) else $error("buffer B too small");
  end

endmodule
