// tb_fc_mapping_sweep: the mapping-scheme study on a complex fully connected
// layer. It uses 128 inputs and 128, 256, 512 and 1024 outputs, and runs each
// size under both LATENCY_OPT and RESOURCE_OPT, which makes eight
// complex_fc_layer instances running side by side.
//
// Weights and inputs come from a hash of the address (the formula is in
// val_of), so no tables are stored. Each memory model has one cycle of read
// latency. For every output the test computes the exact complex dot product
// (64-bit, shifted by FRAC and saturated) and compares it with the hardware.
// It also checks:
//   * the output count;
//   * the cycle count, which must lie between OUT*128*II and that plus 8,
//     with II = 1 for latency-opt and 2 for resource-opt;
//   * that resource-opt takes 2x the cycles of latency-opt at every size,
//     within 16 cycles.
// The measured cycle counts are printed so that the growth of latency with
// output dimension, and the widening gap between the schemes, can be read off.
// The layer sizes are those of the published mapping study; the hashed test
// data and the cycle bounds are this test's own.
module tb_fc_mapping_sweep;
  import cvnn_pkg::*;

  localparam int IN_N = 128;
  localparam int NSZ  = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  int cycles [NSZ][2];
  logic fin [NSZ][2];

  always #5 clk = ~clk;

  // Deterministic pseudo-random Q8.8 value in [-2.0, 2.0) from an address.
  function automatic data_t val_of(int unsigned a, int unsigned salt);
    int unsigned h;
    h = (a + 1) * 32'h9E37_79B1 ^ salt;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    return data_t'($signed({{7{h[8]}}, h[8:0]}));
  endfunction

  function automatic cplx_t w_of(int unsigned a);
    cplx_t c;
    c.re = val_of(a, 32'h1111_0000);
    c.im = val_of(a, 32'h2222_0000);
    return c;
  endfunction

  function automatic cplx_t x_of(int unsigned a);
    cplx_t c;
    c.re = val_of(a, 32'h3333_0000);
    c.im = val_of(a, 32'h4444_0000);
    return c;
  endfunction

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

  for (genvar g = 0; g < NSZ; g++) begin : g_size
    for (genvar m = 0; m < 2; m++) begin : g_map
      localparam int OUT_N = 128 << g;
      localparam int IAW = $clog2(IN_N), WAW = $clog2(IN_N * OUT_N);
      localparam mapping_t MAP = (m == 0) ? LATENCY_OPT : RESOURCE_OPT;
      logic start, busy, done;
      logic [IAW-1:0] ia;
      logic [WAW-1:0] wa;
      cplx_t id, wd;
      cbeat_t ob;

      complex_fc_layer #(.IN_N(IN_N), .OUT_N(OUT_N), .MAPPING(MAP)) u_fc (
        .clk, .rst_n, .start, .busy, .done, .ifm_addr(ia), .ifm_data(id),
        .w_addr(wa), .w_data(wd), .out_beat(ob));

      always_ff @(posedge clk) begin
        id <= x_of(int'(ia));
        wd <= w_of(int'(wa));
      end

      initial begin
        int n, cyc;
        cplx_t e;
        longint sr, si;
        start = 1'b0;
        fin[g][m] = 1'b0;
        n = 0;
        cyc = 0;
        @(posedge rst_n);
        @(negedge clk); start = 1'b1;
        @(negedge clk); start = 1'b0;
        forever begin
          if (ob.valid) begin
            sr = 0; si = 0;
            for (int i = 0; i < IN_N; i++) begin
              cplx_t w, x;
              w = w_of(n * IN_N + i);
              x = x_of(i);
              sr += longint'(w.re) * x.re - longint'(w.im) * x.im;
              si += longint'(w.re) * x.im + longint'(w.im) * x.re;
            end
            e.re = sat(sr);
            e.im = sat(si);
            check("idx", longint'(ob.idx), longint'(n));
            check("re", longint'(ob.data.re), longint'(e.re));
            check("im", longint'(ob.data.im), longint'(e.im));
            n++;
          end
          if (done) break;
          @(negedge clk); cyc++;
        end
        check("outputs", longint'(n), longint'(OUT_N));
        checks++;
        if (cyc < OUT_N * IN_N * (m + 1) || cyc > OUT_N * IN_N * (m + 1) + 8) begin
          failures++;
          $display("FAIL out=%0d map=%0d cycles %0d", OUT_N, m, cyc);
        end
        cycles[g][m] = cyc;
        fin[g][m] = 1'b1;
      end
    end
  end

  initial begin
    int all;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do begin
      @(negedge clk);
      all = 1;
      for (int g = 0; g < NSZ; g++)
        for (int m = 0; m < 2; m++)
          if (!fin[g][m]) all = 0;
    end while (all == 0);
    for (int g = 0; g < NSZ; g++) begin
      $display("FC 128x%0d: latency-opt %0d cycles, resource-opt %0d cycles",
               128 << g, cycles[g][0], cycles[g][1]);
      checks++;
      if (cycles[g][1] < 2 * cycles[g][0] - 16 || cycles[g][1] > 2 * cycles[g][0] + 16) begin
        failures++;
        $display("FAIL ratio at %0d outputs", 128 << g);
      end
      if (g > 0) begin
        checks++;
        if (cycles[g][1] - cycles[g][0] <= cycles[g-1][1] - cycles[g-1][0]) begin
          failures++;
          $display("FAIL gap does not widen at %0d outputs", 128 << g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
