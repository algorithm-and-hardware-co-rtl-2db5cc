// tb_complex_conv_layer: runs a small complex convolution (2 input channels,
// 6x5 input, 3 output channels, 3x3 kernel) on a latency-opt and a
// resource-opt instance. The tb models the two memories (one cycle read
// latency) and computes every output here with 64-bit complex arithmetic,
// an arithmetic shift by FRAC and saturation to 16 bits. Data are drawn so
// that some outputs saturate. Checks: every output value and index, the
// output count, and the cycle count (II x MACs plus at most 8 cycles).
// The four sub-operations and the two mapping schemes follow the published
// design; sizes, data and layouts are this test's and this design's own.
// No ports; prints TB_RESULT and has a watchdog.
module tb_complex_conv_layer;
  import cvnn_pkg::*;

  localparam int IN_C = 2, IN_H = 6, IN_W = 5, OUT_C = 3, K = 3;
  localparam int OH = IN_H - K + 1, OW = IN_W - K + 1;
  localparam int NI = IN_C * IN_H * IN_W, NW = OUT_C * IN_C * K * K, NO = OUT_C * OH * OW;
  localparam int IAW = $clog2(NI), WAW = $clog2(NW);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  cplx_t X [NI];
  cplx_t Wt [NW];
  cplx_t expv [NO];

  always #5 clk = ~clk;

  logic start[2], busy[2], done[2];
  logic [IAW-1:0] ia[2];
  logic [WAW-1:0] wa[2];
  cplx_t id[2], wd[2];
  cbeat_t ob[2];

  complex_conv_layer #(.IN_C(IN_C), .IN_H(IN_H), .IN_W(IN_W), .OUT_C(OUT_C), .K(K),
                       .MAPPING(LATENCY_OPT)) u_lat (
    .clk, .rst_n, .start(start[0]), .busy(busy[0]), .done(done[0]), .ifm_addr(ia[0]),
    .ifm_data(id[0]), .w_addr(wa[0]), .w_data(wd[0]), .out_beat(ob[0]));
  complex_conv_layer #(.IN_C(IN_C), .IN_H(IN_H), .IN_W(IN_W), .OUT_C(OUT_C), .K(K),
                       .MAPPING(RESOURCE_OPT)) u_res (
    .clk, .rst_n, .start(start[1]), .busy(busy[1]), .done(done[1]), .ifm_addr(ia[1]),
    .ifm_data(id[1]), .w_addr(wa[1]), .w_data(wd[1]), .out_beat(ob[1]));

  // Memory models with one cycle of read latency.
  always_ff @(posedge clk) begin
    for (int m = 0; m < 2; m++) begin
      id[m] <= X[ia[m]];
      wd[m] <= Wt[wa[m]];
    end
  end

  function automatic data_t sat(longint s);
    longint q = s >>> FRAC;
    if (q > 32767) return 16'sh7fff;
    if (q < -32768) return 16'sh8000;
    return data_t'(q);
  endfunction

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic run(int m, int trial);
    int n = 0, cyc = 0;
    int ii = (m == 0) ? 1 : 2;
    @(negedge clk); start[m] = 1'b1;
    @(negedge clk); start[m] = 1'b0;
    while (!(done[m]) && cyc < 5000) begin
      if (ob[m].valid) begin
        check($sformatf("m%0d t%0d idx", m, trial), ob[m].idx, n);
        check($sformatf("m%0d t%0d re[%0d]", m, trial, n), ob[m].data.re, expv[n].re);
        check($sformatf("m%0d t%0d im[%0d]", m, trial, n), ob[m].data.im, expv[n].im);
        n++;
      end
      @(negedge clk); cyc++;
    end
    if (ob[m].valid) begin
      check("last idx", ob[m].idx, n);
      check("last re", ob[m].data.re, expv[n].re);
      check("last im", ob[m].data.im, expv[n].im);
      n++;
    end
    check($sformatf("m%0d outputs", m), n, NO);
    checks++;
    if (cyc < NO * IN_C * K * K * ii || cyc > NO * IN_C * K * K * ii + 8) begin
      failures++; $display("FAIL m%0d cycles %0d", m, cyc);
    end
  endtask

  initial begin
    start[0] = 0; start[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 3; trial++) begin
      int big;
      big = (trial == 2) ? 32767 : 600;
      for (int i = 0; i < NI; i++) begin
        X[i].re = data_t'($urandom_range(0, 2*big) - big);
        X[i].im = data_t'($urandom_range(0, 2*big) - big);
      end
      for (int i = 0; i < NW; i++) begin
        Wt[i].re = data_t'($urandom_range(0, 2*big) - big);
        Wt[i].im = data_t'($urandom_range(0, 2*big) - big);
      end
      for (int oc = 0; oc < OUT_C; oc++)
        for (int oy = 0; oy < OH; oy++)
          for (int ox = 0; ox < OW; ox++) begin
            longint sr, si;
            sr = 0; si = 0;
            for (int ic = 0; ic < IN_C; ic++)
              for (int ky = 0; ky < K; ky++)
                for (int kx = 0; kx < K; kx++) begin
                  cplx_t w, x;
                  w = Wt[((oc*IN_C + ic)*K + ky)*K + kx];
                  x = X[ic*IN_H*IN_W + (oy+ky)*IN_W + ox + kx];
                  sr += longint'(w.re) * x.re - longint'(w.im) * x.im;
                  si += longint'(w.re) * x.im + longint'(w.im) * x.re;
                end
            expv[(oc*OH + oy)*OW + ox].re = sat(sr);
            expv[(oc*OH + oy)*OW + ox].im = sat(si);
          end
      run(0, trial);
      run(1, trial);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
