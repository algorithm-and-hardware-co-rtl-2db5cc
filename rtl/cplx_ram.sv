// cplx_ram: simple dual-port on-chip memory of complex words, used for the
// feature-map buffers and the weight buffers of the accelerator.
//
// One write port and one read port on the same clock. The read is
// registered: `rdata` shows the word at `raddr` one cycle later. A read and a
// write of the same address in the same cycle return the old word. There is
// no reset; the contents are undefined until written. On an FPGA this maps to
// block RAM, which is where the paper's accelerators keep their parameters
// and feature maps; the organisation is a choice of this design.
module cplx_ram
  import cvnn_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  cplx_t         wdata,
  input  logic [AW-1:0] raddr,
  output cplx_t         rdata
);

  cplx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
