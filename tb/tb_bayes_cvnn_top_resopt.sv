// tb_bayes_cvnn_top_resopt: the end-to-end test of tb_bayes_cvnn_top, run on
// the accelerator built with the resource-opt mapping (two shared engines per
// conv/FC layer, one shared engine per activation and pooling layer). All
// sizes are the defaults; only the mapping is changed. Results must match the
// same reference model bit for bit, and the run time must follow two cycles
// per complex MAC and per pooling read.
// The resource-opt scheme (real input part first, then imaginary) is the
// published one; the test data, rates and bounds are this test's own. No
// ports; prints TB_RESULT and has a watchdog.
module tb_bayes_cvnn_top_resopt;
  import cvnn_pkg::*;
  import bcvnn_ref_pkg::*;

  localparam int IMG = 32, K = 5, C1 = 6, C2 = 16, F1 = 120, F2 = 84, NCLS = 10, S = 3;
  localparam int II = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ld_valid = 1'b0;
  logic [2:0] ld_sel = '0;
  logic [IDX_W-1:0] ld_addr = '0;
  cplx_t ld_data = '0;
  bayes_cfg_t bayes_cfg [3];
  logic [RATE_W-1:0] drop_rate [3];
  logic start = 1'b0, busy, done, res_valid;
  logic [IDX_W-1:0] res_idx;
  cplx_t res_mean, res_std;

  int checks = 0, failures = 0;
  int ev_r = 0, ev_i = 0, ev_b = 0, ev_none = 0, ev_unc = 0, ev_zero_unc = 0, ev_pred = 0;
  bcvnn_model model;

  always #5 clk = ~clk;

  bayes_cvnn_top #(.MAPPING(RESOURCE_OPT)) dut (
    .clk, .rst_n, .ld_valid, .ld_sel, .ld_addr, .ld_data, .bayes_cfg, .drop_rate,
    .start, .busy, .done, .res_valid, .res_idx, .res_mean, .res_std);

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  function automatic cplx_t rnd_c(int amp);
    cplx_t c;
    c.re = data_t'(int'($urandom_range(0, 2*amp)) - amp);
    c.im = data_t'(int'($urandom_range(0, 2*amp)) - amp);
    return c;
  endfunction

  task automatic load(input int sel, input cplx_t mem[]);
    for (int i = 0; i < mem.size(); i++) begin
      @(negedge clk);
      ld_valid = 1'b1; ld_sel = 3'(sel); ld_addr = IDX_W'(i); ld_data = mem[i];
    end
    @(negedge clk); ld_valid = 1'b0;
  endtask

  task automatic run(bayes_cfg_t c0, bayes_cfg_t c1, bayes_cfg_t c2, int r0, int r1, int r2);
    bayes_cfg_t cfg[3];
    int rate[3];
    int cyc, n, macs0, lo, hi;
    bit any_unc;
    cfg[0] = c0; cfg[1] = c1; cfg[2] = c2;
    rate[0] = r0; rate[1] = r1; rate[2] = r2;
    macs0 = model.mac_count;
    model.run(cfg, rate);
    for (int l = 0; l < 3; l++) begin
      if (cfg[l] == BAYES_R) ev_r++;
      if (cfg[l] == BAYES_I) ev_i++;
      if (cfg[l] == BAYES_B) ev_b++;
      if (cfg[l] == BAYES_NONE) ev_none++;
    end
    @(negedge clk);
    bayes_cfg = cfg;
    for (int l = 0; l < 3; l++) drop_rate[l] = RATE_W'(rate[l]);
    start = 1'b1;
    @(negedge clk); start = 1'b0;
    cyc = 1; n = 0; any_unc = 0;
    while (!done && cyc < 6_000_000) begin
      if (res_valid) begin
        check("res_idx", res_idx, n);
        check($sformatf("mean.re[%0d]", n), res_mean.re, model.mean[n][0]);
        check($sformatf("mean.im[%0d]", n), res_mean.im, model.mean[n][1]);
        check($sformatf("std.re[%0d]", n),  res_std.re,  model.stdv[n][0]);
        check($sformatf("std.im[%0d]", n),  res_std.im,  model.stdv[n][1]);
        if (res_std.re != 0 || res_std.im != 0) any_unc = 1;
        if (res_mean.re != 0 || res_mean.im != 0) ev_pred++;
        n++;
      end
      @(negedge clk); cyc++;
    end
    check("results", n, NCLS);
    if (any_unc) ev_unc++;
    if (c0 == BAYES_NONE && c1 == BAYES_NONE && c2 == BAYES_NONE) begin
      check("no uncertainty without dropout", any_unc, 0);
      ev_zero_unc++;
    end
    // Run time: one MAC per II cycles, four reads per pooled output, plus
    // bounded overhead for masks, pipeline drain and the result stream.
    lo = (model.mac_count - macs0) * II + S * 4 * II * (C1*(H1()/2)*(H1()/2) + C2*(H2()/2)*(H2()/2));
    hi = lo + S * (F1 + 8 + 7 * 16) + NCLS * 34 + 16;
    checks++;
    if (cyc < lo || cyc > hi) begin
      failures++; $display("FAIL run time %0d cycles, expected %0d..%0d", cyc, lo, hi);
    end
    $display("run %s-%s-%s drop %0d/%0d/%0d: %0d cycles (%0d MAC cycles)", c0.name(), c1.name(),
             c2.name(), r0, r1, r2, cyc, (model.mac_count - macs0) * II);
  endtask

  function automatic int H1(); return IMG - K + 1; endfunction
  function automatic int H2(); return H1() / 2 - K + 1; endfunction

  initial begin
    bayes_cfg[0] = BAYES_NONE; bayes_cfg[1] = BAYES_NONE; bayes_cfg[2] = BAYES_NONE;
    drop_rate[0] = '0; drop_rate[1] = '0; drop_rate[2] = '0;
    model = new(IMG, K, C1, C2, F1, F2, NCLS, S);
    foreach (model.X[i])  model.X[i]  = rnd_c(256);
    foreach (model.W1[i]) model.W1[i] = rnd_c(96);
    foreach (model.W2[i]) model.W2[i] = rnd_c(40);
    foreach (model.W3[i]) model.W3[i] = rnd_c(40);
    foreach (model.W4[i]) model.W4[i] = rnd_c(40);
    foreach (model.W5[i]) model.W5[i] = rnd_c(40);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load(0, model.X); load(1, model.W1); load(2, model.W2);
    load(3, model.W3); load(4, model.W4); load(5, model.W5);
    run(BAYES_B,    BAYES_B,    BAYES_B,    128, 128, 128);   // manual, dropout in both parts
    run(BAYES_I,    BAYES_I,    BAYES_B,    128, 64, 192);   // mixed configuration
    run(BAYES_R,    BAYES_B,    BAYES_R,    64, 96, 32);    // mixed configuration
    run(BAYES_R,    BAYES_NONE, BAYES_NONE, 128, 0, 0);   // one Bayesian layer after conv1
    run(BAYES_I,    BAYES_NONE, BAYES_NONE, 128, 0, 0);
    run(BAYES_B,    BAYES_NONE, BAYES_NONE, 128, 0, 0);
    run(BAYES_NONE, BAYES_NONE, BAYES_NONE, 128, 128, 128);   // plain complex network
    check("event: dropout in real part",      ev_r > 0, 1);
    check("event: dropout in imaginary part", ev_i > 0, 1);
    check("event: dropout in both parts",     ev_b > 0, 1);
    check("event: Bayesian layer switched off", ev_none > 0, 1);
    check("event: channel dropped",           model.dropped_channels > 0, 1);
    check("event: channel kept",              model.kept_channels > 0, 1);
    check("event: non-zero uncertainty",      ev_unc > 0, 1);
    check("event: zero uncertainty",          ev_zero_unc > 0, 1);
    check("event: non-zero prediction",       ev_pred > 0, 1);
    $display("events: R %0d I %0d B %0d off %0d dropped %0d kept %0d uncertain runs %0d",
             ev_r, ev_i, ev_b, ev_none, model.dropped_channels, model.kept_channels, ev_unc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
