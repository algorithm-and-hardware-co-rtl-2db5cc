// tb_complex_fc_layer: runs a small complex fully connected layer (13 inputs,
// 7 outputs) on a latency-opt and a resource-opt instance, with memory models
// of one cycle read latency. Every output is compared with a complex dot
// product computed here (64-bit, shift by FRAC, saturation to 16 bits); one
// trial uses full-range data so that results saturate. The output count and
// the cycle count (II x MACs plus at most 8 cycles) are checked too.
module tb_complex_fc_layer;
  import cvnn_pkg::*;

  localparam int IN_N = 13, OUT_N = 7;
  localparam int IAW = $clog2(IN_N), WAW = $clog2(IN_N * OUT_N);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  cplx_t X [IN_N];
  cplx_t Wt [IN_N * OUT_N];
  cplx_t expv [OUT_N];

  always #5 clk = ~clk;

  logic start[2], busy[2], done[2];
  logic [IAW-1:0] ia[2];
  logic [WAW-1:0] wa[2];
  cplx_t id[2], wd[2];
  cbeat_t ob[2];

  complex_fc_layer #(.IN_N(IN_N), .OUT_N(OUT_N), .MAPPING(LATENCY_OPT)) u_lat (
    .clk, .rst_n, .start(start[0]), .busy(busy[0]), .done(done[0]), .ifm_addr(ia[0]),
    .ifm_data(id[0]), .w_addr(wa[0]), .w_data(wd[0]), .out_beat(ob[0]));
  complex_fc_layer #(.IN_N(IN_N), .OUT_N(OUT_N), .MAPPING(RESOURCE_OPT)) u_res (
    .clk, .rst_n, .start(start[1]), .busy(busy[1]), .done(done[1]), .ifm_addr(ia[1]),
    .ifm_data(id[1]), .w_addr(wa[1]), .w_data(wd[1]), .out_beat(ob[1]));

  always_ff @(posedge clk) begin
    for (int m = 0; m < 2; m++) begin
      id[m] <= X[ia[m]];
      wd[m] <= Wt[wa[m]];
    end
  end

  function automatic data_t sat(longint s);
    longint q;
    q = s >>> FRAC;
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

  task automatic run(int m);
    int n, cyc, ii;
    n = 0; cyc = 0; ii = (m == 0) ? 1 : 2;
    @(negedge clk); start[m] = 1'b1;
    @(negedge clk); start[m] = 1'b0;
    while (!done[m] && cyc < 5000) begin
      if (ob[m].valid) begin
        check("idx", ob[m].idx, n);
        check("re", ob[m].data.re, expv[n].re);
        check("im", ob[m].data.im, expv[n].im);
        n++;
      end
      @(negedge clk); cyc++;
    end
    if (ob[m].valid) begin
      check("idx", ob[m].idx, n);
      check("re", ob[m].data.re, expv[n].re);
      check("im", ob[m].data.im, expv[n].im);
      n++;
    end
    check("outputs", n, OUT_N);
    checks++;
    if (cyc < OUT_N * IN_N * ii || cyc > OUT_N * IN_N * ii + 8) begin
      failures++; $display("FAIL m%0d cycles %0d", m, cyc);
    end
  endtask

  initial begin
    start[0] = 0; start[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      int big;
      big = (trial == 3) ? 32767 : 900;
      for (int i = 0; i < IN_N; i++) begin
        X[i].re = data_t'($urandom_range(0, 2*big) - big);
        X[i].im = data_t'($urandom_range(0, 2*big) - big);
      end
      for (int i = 0; i < IN_N * OUT_N; i++) begin
        Wt[i].re = data_t'($urandom_range(0, 2*big) - big);
        Wt[i].im = data_t'($urandom_range(0, 2*big) - big);
      end
      for (int o = 0; o < OUT_N; o++) begin
        longint sr, si;
        sr = 0; si = 0;
        for (int i = 0; i < IN_N; i++) begin
          sr += longint'(Wt[o*IN_N + i].re) * X[i].re - longint'(Wt[o*IN_N + i].im) * X[i].im;
          si += longint'(Wt[o*IN_N + i].re) * X[i].im + longint'(Wt[o*IN_N + i].im) * X[i].re;
        end
        expv[o].re = sat(sr);
        expv[o].im = sat(si);
      end
      run(0);
      run(1);
    end
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
