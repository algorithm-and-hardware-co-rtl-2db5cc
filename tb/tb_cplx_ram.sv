// tb_cplx_ram: writes random complex words to random addresses of a small
// memory while reading random addresses, and checks every read (one cycle
// latency, old data on a same-address read/write) against a model array.
// The memory behaviour checked is this design's own choice (on-chip block
// RAM style, old data on collision). No ports; prints TB_RESULT and has a
// watchdog.
module tb_cplx_ram;
  import cvnn_pkg::*;

  localparam int DEPTH = 37, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  cplx_t wdata = '0, rdata;
  cplx_t model [DEPTH];
  logic  written [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cplx_ram #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    cplx_t want;
    logic  valid_read;
    for (int i = 0; i < DEPTH; i++) written[i] = 1'b0;
    // Fill every word once.
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = cplx_t'($urandom);
      model[i] = wdata; written[i] = 1'b1;
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(0, DEPTH-1));
      we    = ($urandom_range(0, 1) == 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom_range(0, DEPTH-1));
      wdata = cplx_t'($urandom);
      want  = model[raddr];
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata !== want) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d: got %h want %h", raddr, rdata, want);
      end
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
