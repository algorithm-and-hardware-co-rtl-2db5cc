// tb_complex_maxpool: pools a random 3 x 6 x 4 complex feature map with a
// latency-opt and a resource-opt instance (memory models with one cycle read
// latency). Each output is compared with the 2x2 maxima of the real parts
// and of the imaginary parts computed here; index order, output count and
// cycle count (4 x II reads per output plus at most 8 cycles) are checked.
// Pooling each part with a real function follows the published layer class;
// 2x2 max pooling and the sizes are this design's and this test's choices.
// No ports; prints TB_RESULT and has a watchdog.
module tb_complex_maxpool;
  import cvnn_pkg::*;

  localparam int C = 3, H = 6, W = 4, OH = H / 2, OW = W / 2;
  localparam int NI = C * H * W, NO = C * OH * OW, IAW = $clog2(NI);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  cplx_t X [NI];
  cplx_t expv [NO];

  always #5 clk = ~clk;

  logic start[2], busy[2], done[2];
  logic [IAW-1:0] ia[2];
  cplx_t id[2];
  cbeat_t ob[2];

  complex_maxpool #(.C(C), .H(H), .W(W), .MAPPING(LATENCY_OPT)) u_lat (
    .clk, .rst_n, .start(start[0]), .busy(busy[0]), .done(done[0]), .ifm_addr(ia[0]),
    .ifm_data(id[0]), .out_beat(ob[0]));
  complex_maxpool #(.C(C), .H(H), .W(W), .MAPPING(RESOURCE_OPT)) u_res (
    .clk, .rst_n, .start(start[1]), .busy(busy[1]), .done(done[1]), .ifm_addr(ia[1]),
    .ifm_data(id[1]), .out_beat(ob[1]));

  always_ff @(posedge clk) for (int m = 0; m < 2; m++) id[m] <= X[ia[m]];

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
    check("outputs", n, NO);
    checks++;
    if (cyc < NO * 4 * ii || cyc > NO * 4 * ii + 8) begin
      failures++; $display("FAIL m%0d cycles %0d", m, cyc);
    end
  endtask

  initial begin
    start[0] = 0; start[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int i = 0; i < NI; i++) begin
        X[i].re = data_t'($urandom);
        X[i].im = data_t'($urandom);
      end
      for (int c = 0; c < C; c++)
        for (int oy = 0; oy < OH; oy++)
          for (int ox = 0; ox < OW; ox++) begin
            data_t mr, mi;
            mr = 16'sh8000; mi = 16'sh8000;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++) begin
                cplx_t x;
                x = X[c*H*W + (2*oy+dy)*W + 2*ox+dx];
                if (x.re > mr) mr = x.re;
                if (x.im > mi) mi = x.im;
              end
            expv[(c*OH + oy)*OW + ox].re = mr;
            expv[(c*OH + oy)*OW + ox].im = mi;
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
