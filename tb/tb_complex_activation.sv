// tb_complex_activation: streams random complex elements through a
// latency-opt instance (one per cycle) and a resource-opt instance (one every
// two cycles) and compares each output with ReLU applied to each part,
// computed here. Latency is checked: 1 cycle (latency-opt), 2 (resource-opt).
// Applying a real function to each part, on two engines or one shared engine,
// follows the published mapping schemes; ReLU is this design's choice. No
// ports; prints TB_RESULT and has a watchdog.
module tb_complex_activation;
  import cvnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  cbeat_t ib[2], ob[2];

  always #5 clk = ~clk;

  complex_activation #(.MAPPING(LATENCY_OPT))  u_lat (.clk, .rst_n, .in_beat(ib[0]), .out_beat(ob[0]));
  complex_activation #(.MAPPING(RESOURCE_OPT)) u_res (.clk, .rst_n, .in_beat(ib[1]), .out_beat(ob[1]));

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  // Expected outputs, queued in order.
  cbeat_t q[2][$];
  int lat_sum[2], n_out[2];
  longint t_in[2][$];
  longint now = 0;

  always @(posedge clk) now++;

  always @(negedge clk) begin
    for (int m = 0; m < 2; m++) begin
      if (rst_n && ob[m].valid) begin
        cbeat_t e;
        e = q[m].pop_front();
        check("idx", ob[m].idx, e.idx);
        check("re", ob[m].data.re, e.data.re);
        check("im", ob[m].data.im, e.data.im);
        check("latency", now - t_in[m].pop_front(), (m == 0) ? 1 : 2);
        n_out[m]++;
      end
    end
  end

  initial begin
    ib[0] = '0; ib[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      for (int m = 0; m < 2; m++) begin
        logic go;
        go = (m == 0) ? ($urandom_range(0, 3) != 0) : (!ib[1].valid && $urandom_range(0, 1) == 1);
        ib[m] = '0;
        if (go) begin
          cbeat_t e;
          ib[m].valid = 1'b1;
          ib[m].idx = IDX_W'(i);
          ib[m].data.re = data_t'($urandom);
          ib[m].data.im = data_t'($urandom);
          e = ib[m];
          e.data.re = (e.data.re < 0) ? '0 : e.data.re;
          e.data.im = (e.data.im < 0) ? '0 : e.data.im;
          q[m].push_back(e);
          t_in[m].push_back(now);
        end
      end
    end
    @(negedge clk); ib[0] = '0; ib[1] = '0;
    repeat (4) @(negedge clk);
    check("all out lat", q[0].size(), 0);
    check("all out res", q[1].size(), 0);
    check("some outputs", (n_out[0] > 100) && (n_out[1] > 50), 1);
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
