// tb_xorshift_rng: checks the dropout random number source against a
// reference xorshift32 (shifts 13, 17, 5) computed here. Steps are applied
// at random; the output must change only after a cycle with `step` high and
// must equal the top 8 bits of the reference state.
// The published algorithm only asks for a uniform random number; the
// xorshift generator is this design's choice. No ports; prints TB_RESULT and
// has a watchdog.
module tb_xorshift_rng;
  import cvnn_pkg::*;

  localparam logic [31:0] SEED = 32'hDEAD_BEEF;

  logic clk = 1'b0, rst_n = 1'b0, step = 1'b0;
  logic [RATE_W-1:0] rnd;
  int checks = 0, failures = 0;
  logic [31:0] model;

  always #5 clk = ~clk;

  xorshift_rng #(.SEED(SEED)) dut (.clk, .rst_n, .step, .rnd);

  function automatic logic [31:0] xs(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  initial begin
    model = SEED;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      checks++;
      if (rnd !== model[31:24]) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: got %h want %h", i, rnd, model[31:24]);
      end
      step = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (step) model = xs(model);
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
