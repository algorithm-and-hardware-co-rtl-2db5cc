// tb_complex_dropout_layer: checks the Bayesian layer in its four switch
// settings (NONE, R, I, B). For each setting it redraws the masks, streams a
// random complex feature map through and compares every element with a
// reference built here: a part whose switch is closed gets channel-wise
// Bernoulli dropout (own xorshift32 model per engine, channel = index/PLANE,
// output = (mask ? x : 0) * keep_rate); a part whose switch is open must
// come out unchanged. It also checks mask_done and the one-cycle latency.
// The R/I/B switch settings follow the published Bayesian layer; NONE, the
// generators and the sizes are this design's and this test's own. No ports;
// prints TB_RESULT and has a watchdog.
module tb_complex_dropout_layer;
  import cvnn_pkg::*;

  localparam int          N_CHAN  = 6;
  localparam int          PLANE   = 4;
  localparam logic [31:0] SEED_RE = 32'h1111_2222;
  localparam logic [31:0] SEED_IM = 32'h3333_4444;

  logic clk = 1'b0, rst_n = 1'b0;
  bayes_cfg_t cfg;
  logic [RATE_W-1:0] drop_rate;
  logic mask_start = 1'b0, mask_done;
  cbeat_t in_beat, out_beat;
  int checks = 0, failures = 0;
  logic [31:0] st_re, st_im;
  logic m_re [N_CHAN], m_im [N_CHAN];
  int cfg_seen [4];

  always #5 clk = ~clk;

  complex_dropout_layer #(.N_CHAN(N_CHAN), .PLANE(PLANE), .SEED_RE(SEED_RE), .SEED_IM(SEED_IM))
    dut (.clk, .rst_n, .cfg, .drop_rate, .mask_start, .mask_done, .in_beat, .out_beat);

  function automatic logic [31:0] xs(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  function automatic longint dropped(logic on, logic m, data_t x, int keep);
    if (!on) return longint'(x);
    return m ? ((longint'(x) * keep) >>> 8) : 0;
  endfunction

  initial begin
    int keep, cyc;
    logic sr, si;
    st_re = SEED_RE; st_im = SEED_IM;
    in_beat = '0; cfg = BAYES_NONE; drop_rate = 8'd128;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 16; round++) begin
      cfg = bayes_cfg_t'(round % 4);
      cfg_seen[round % 4]++;
      drop_rate = 8'($urandom_range(20, 200));
      keep = 256 - drop_rate;
      sr = (cfg == BAYES_R || cfg == BAYES_B);
      si = (cfg == BAYES_I || cfg == BAYES_B);
      for (int c = 0; c < N_CHAN; c++) begin
        if (sr) begin m_re[c] = (int'(st_re[31:24]) < keep); st_re = xs(st_re); end
        if (si) begin m_im[c] = (int'(st_im[31:24]) < keep); st_im = xs(st_im); end
      end
      @(negedge clk); mask_start = 1'b1;
      @(negedge clk); mask_start = 1'b0;
      cyc = 0;
      while (!mask_done && cyc < 100) begin @(negedge clk); cyc++; end
      check("mask_done seen", (cyc < 100), 1);
      check("mask cycles", cyc, (sr || si) ? N_CHAN : 0);
      for (int i = 0; i < N_CHAN * PLANE; i++) begin
        cplx_t x;
        x.re = data_t'($urandom); x.im = data_t'($urandom);
        in_beat.valid = 1'b1; in_beat.idx = IDX_W'(i); in_beat.data = x;
        @(negedge clk);
        in_beat.valid = 1'b0;
        check("valid", out_beat.valid, 1);
        check("idx", out_beat.idx, i);
        check("re", out_beat.data.re, dropped(sr, m_re[i / PLANE], x.re, keep));
        check("im", out_beat.data.im, dropped(si, m_im[i / PLANE], x.im, keep));
      end
      @(negedge clk);
      check("idle valid", out_beat.valid, 0);
    end
    for (int k = 0; k < 4; k++) check("configuration exercised", cfg_seen[k] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
