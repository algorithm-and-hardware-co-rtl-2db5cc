// tb_mc_aggregator: feeds S = 3 passes of random outputs (in random order
// within a pass) and checks the streamed results against values computed
// here: mean = sum / S (truncating), std = floor(sqrt((S*sumsq - sum^2)/S^2)).
// It covers identical samples (std 0), large spreads and several runs, and
// checks the timing of the result stream: the first result RES_II cycles
// after the closing sample_done, one every RES_II = 34 cycles after that (a
// load cycle, 32 square-root steps and an output cycle), no valid in between,
// and all_done with the last result.
// Mean as prediction and standard deviation as uncertainty over S = 3
// samples follow the published method; per-part statistics, truncation and
// the timing are this design's. No ports; prints TB_RESULT, has a watchdog.
module tb_mc_aggregator;
  import cvnn_pkg::*;

  localparam int N_OUT = 5, S = 3;
  localparam int RES_II = 34;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, sample_done = 1'b0;
  cbeat_t in_beat;
  logic res_valid, all_done;
  logic [IDX_W-1:0] res_idx;
  cplx_t res_mean, res_std;
  int checks = 0, failures = 0;
  longint vals [S][N_OUT][2];

  always #5 clk = ~clk;

  mc_aggregator #(.N_OUT(N_OUT), .S(S)) dut (
    .clk, .rst_n, .clear, .in_beat, .sample_done, .res_valid, .res_idx, .res_mean,
    .res_std, .all_done);

  task automatic check(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  function automatic longint fsqrt(longint v);
    longint r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic longint exp_std(int o, int p);
    longint s, q, v, r;
    s = 0; q = 0;
    for (int k = 0; k < S; k++) begin s += vals[k][o][p]; q += vals[k][o][p] * vals[k][o][p]; end
    v = (S * q - s * s) / (S * S);
    r = fsqrt(v);
    return (r > 32767) ? 32767 : r;
  endfunction

  function automatic longint exp_mean(int o, int p);
    longint s;
    s = 0;
    for (int k = 0; k < S; k++) s += vals[k][o][p];
    return s / S;
  endfunction

  initial begin
    in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      int range, wait_cyc;
      range = (run == 0) ? 0 : (run % 2 == 1) ? 300 : 30000;
      for (int k = 0; k < S; k++)
        for (int o = 0; o < N_OUT; o++)
          for (int p = 0; p < 2; p++)
            vals[k][o][p] = (range == 0) ? 77 : longint'($urandom_range(0, 2*range)) - range;
      @(negedge clk); clear = 1'b1;
      @(negedge clk); clear = 1'b0;
      for (int k = 0; k < S; k++) begin
        int order [N_OUT];
        for (int o = 0; o < N_OUT; o++) order[o] = o;
        order.shuffle();
        for (int j = 0; j < N_OUT; j++) begin
          @(negedge clk);
          in_beat.valid = 1'b1;
          in_beat.idx = IDX_W'(order[j]);
          in_beat.data.re = data_t'(vals[k][order[j]][0]);
          in_beat.data.im = data_t'(vals[k][order[j]][1]);
        end
        @(negedge clk); in_beat.valid = 1'b0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        sample_done = 1'b1;
        @(negedge clk); sample_done = 1'b0;
        if (k < S-1) check("no early result", res_valid, 0);
      end
      wait_cyc = 0;
      while (!res_valid && wait_cyc < 100) begin @(negedge clk); wait_cyc++; end
      check("result start", wait_cyc, RES_II);
      for (int o = 0; o < N_OUT; o++) begin
        check("res_valid", res_valid, 1);
        check("res_idx", res_idx, o);
        check("mean re", res_mean.re, exp_mean(o, 0));
        check("mean im", res_mean.im, exp_mean(o, 1));
        check("std re", res_std.re, exp_std(o, 0));
        check("std im", res_std.im, exp_std(o, 1));
        check("all_done", all_done, o == N_OUT-1);
        @(negedge clk);
        if (o < N_OUT-1) begin
          for (int c = 1; c < RES_II; c++) begin
            checks++;
            if (res_valid) begin
              failures++;
              $display("FAIL result %0d early by %0d cycles", o + 1, RES_II - c);
            end
            @(negedge clk);
          end
        end
      end
      check("stream ends", res_valid, 0);
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
