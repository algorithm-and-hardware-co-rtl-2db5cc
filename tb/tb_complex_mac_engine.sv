// tb_complex_mac_engine: checks both mappings of the complex MAC engine.
// Random dot products of random length are fed to a latency-opt instance
// (one pair per cycle) and a resource-opt instance (one pair every two
// cycles). Each result is compared with the complex sum computed here
// (re = sum WR*AR - WI*AI, im = sum WR*AI + WI*AR), and the latency from the
// last pair to out_valid is checked: 2 cycles (latency-opt), 3 (resource-opt).
// The two mappings (four parallel engines; a real and an imaginary engine
// fed the real then the imaginary input) follow the published schemes; the
// latencies checked are this design's. No ports; prints TB_RESULT and has a
// watchdog.
module tb_complex_mac_engine;
  import cvnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic  v[2], f[2], l[2], ov[2];
  cplx_t w[2], a[2];
  cacc_t acc[2];

  complex_mac_engine #(.MAPPING(LATENCY_OPT)) u_lat (
    .clk, .rst_n, .in_valid(v[0]), .first(f[0]), .last(l[0]), .w(w[0]), .a(a[0]),
    .out_valid(ov[0]), .acc(acc[0]));
  complex_mac_engine #(.MAPPING(RESOURCE_OPT)) u_res (
    .clk, .rst_n, .in_valid(v[1]), .first(f[1]), .last(l[1]), .w(w[1]), .a(a[1]),
    .out_valid(ov[1]), .acc(acc[1]));

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic run(int m);
    int ii = (m == 0) ? 1 : 2;
    for (int t = 0; t < 60; t++) begin
      int n = $urandom_range(1, 9);
      longint er = 0, ei = 0;
      int lat;
      for (int k = 0; k < n; k++) begin
        cplx_t ww, aa;
        ww.re = data_t'($urandom); ww.im = data_t'($urandom);
        aa.re = data_t'($urandom); aa.im = data_t'($urandom);
        er += longint'(ww.re) * aa.re - longint'(ww.im) * aa.im;
        ei += longint'(ww.re) * aa.im + longint'(ww.im) * aa.re;
        @(negedge clk);
        v[m] = 1'b1; f[m] = (k == 0); l[m] = (k == n-1); w[m] = ww; a[m] = aa;
        @(negedge clk);
        v[m] = 1'b0; f[m] = 1'b0; l[m] = 1'b0;
        w[m] = '0; a[m] = '0;   // inputs are not needed after acceptance
      end
      lat = 1;
      while (!ov[m] && lat < 10) begin @(negedge clk); lat++; end
      check($sformatf("latency m%0d", m), lat, (m == 0) ? 2 : 3);
      check($sformatf("re m%0d", m), acc[m].re, er);
      check($sformatf("im m%0d", m), acc[m].im, ei);
    end
  endtask

  // Back-to-back stream at the full rate of each mapping.
  task automatic stream(int m);
    int ii = (m == 0) ? 1 : 2;
    int n = 16;
    longint er = 0, ei = 0;
    for (int k = 0; k < n; k++) begin
      cplx_t ww, aa;
      ww.re = data_t'($urandom); ww.im = data_t'($urandom);
      aa.re = data_t'($urandom); aa.im = data_t'($urandom);
      er += longint'(ww.re) * aa.re - longint'(ww.im) * aa.im;
      ei += longint'(ww.re) * aa.im + longint'(ww.im) * aa.re;
      @(negedge clk);
      v[m] = 1'b1; f[m] = (k == 0); l[m] = (k == n-1); w[m] = ww; a[m] = aa;
      if (ii == 2) begin @(negedge clk); v[m] = 1'b0; end
    end
    @(negedge clk); v[m] = 1'b0; l[m] = 1'b0;
    while (!ov[m]) @(negedge clk);
    check($sformatf("stream re m%0d", m), acc[m].re, er);
    check($sformatf("stream im m%0d", m), acc[m].im, ei);
  endtask

  initial begin
    for (int m = 0; m < 2; m++) begin v[m] = 0; f[m] = 0; l[m] = 0; w[m] = '0; a[m] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0); run(1);
    stream(0); stream(1);
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
