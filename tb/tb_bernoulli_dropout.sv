// tb_bernoulli_dropout: checks one channel-wise dropout engine against a
// reference written from the dropout algorithm: keep_rate = 1 - drop_rate,
// mask[c] = (uniform < keep_rate) with the uniform numbers of an xorshift32
// modelled here, channel = index / PLANE, output = (mask ? x : 0) * keep_rate.
// Several rounds use different drop rates, including 0 (keep all). It also
// checks that mask generation takes N_CHAN cycles, the one-cycle latency of
// the drop path, and that the observed keep fraction is plausible.
// The algorithm checked is the published dropout pseudocode; the Q0.8 rates,
// generator and small sizes (8 channels of 5 elements) are this test's and
// this design's choices. No ports; prints TB_RESULT and has a watchdog.
module tb_bernoulli_dropout;
  import cvnn_pkg::*;

  localparam int          N_CHAN = 8;
  localparam int          PLANE  = 5;
  localparam logic [31:0] SEED   = 32'h0BAD_F00D;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [RATE_W-1:0] drop_rate;
  logic mask_start = 1'b0, mask_busy, mask_done;
  logic in_valid = 1'b0;
  logic [IDX_W-1:0] in_idx = '0, out_idx;
  data_t in_data = '0, out_data;
  logic out_valid;
  int checks = 0, failures = 0;
  logic [31:0] st;
  logic model_mask [N_CHAN];
  int kept = 0, total = 0;

  always #5 clk = ~clk;

  bernoulli_dropout #(.N_CHAN(N_CHAN), .PLANE(PLANE), .SEED(SEED)) dut (
    .clk, .rst_n, .drop_rate, .mask_start, .mask_busy, .mask_done,
    .in_valid, .in_idx, .in_data, .out_valid, .out_idx, .out_data);

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

  initial begin
    int keep, cyc;
    st = SEED;
    drop_rate = 8'd64;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 12; round++) begin
      drop_rate = (round == 0) ? 8'd0 : 8'($urandom_range(0, 200));
      keep = 256 - drop_rate;
      for (int c = 0; c < N_CHAN; c++) begin
        model_mask[c] = (int'(st[31:24]) < keep);
        st = xs(st);
      end
      @(negedge clk); mask_start = 1'b1;
      @(negedge clk); mask_start = 1'b0;
      cyc = 0;
      while (!mask_done) begin @(negedge clk); cyc++; end
      check("mask generation cycles", cyc, N_CHAN);
      for (int i = 0; i < N_CHAN * PLANE; i++) begin
        data_t x;
        longint want;
        x = data_t'($urandom);
        in_valid = 1'b1; in_idx = IDX_W'(i); in_data = x;
        @(negedge clk);
        in_valid = 1'b0;
        want = model_mask[i / PLANE] ? ((longint'(x) * keep) >>> 8) : 0;
        check("out_valid", out_valid, 1);
        check("out_idx", out_idx, i);
        check("out_data", out_data, want);
        if (round > 0 && i % PLANE == 0) begin
          total++; if (model_mask[i / PLANE]) kept++;
        end
      end
    end
    // The keep fraction over all rounds must be plausible for rates <= 200/256.
    checks++;
    if (kept == 0 || kept == total) begin
      failures++; $display("FAIL keep fraction %0d/%0d", kept, total);
    end
    $display("kept %0d of %0d channels", kept, total);
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
