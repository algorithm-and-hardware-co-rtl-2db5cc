// xorshift_rng: uniform pseudo-random number source for dropout masks.
//
// The dropout algorithm of the paper only calls a random_number_generator()
// that returns a uniform number; the generator itself is a choice of this
// design. It is a 32-bit xorshift generator (shifts 13, 17, 5): each cycle
// with `step` high the state advances once. `rnd` is the top RATE_W bits of the
// current state, a uniform number in [0, 2^RATE_W). The state loads SEED on
// reset; a zero seed would lock the generator, so SEED must be non-zero.
//
// Timing: `rnd` is a register output; it changes on the clock edge after a
// cycle with `step` high.
module xorshift_rng
  import cvnn_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step,
  output logic [RATE_W-1:0] rnd
);

  logic [31:0] state, nxt;

  always_comb begin
    nxt = state;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 17);
    nxt = nxt ^ (nxt << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= SEED;
    else if (step) state <= nxt;
  end

  assign rnd = state[31 -: RATE_W];

  initial assert (SEED != 32'h0) else $error("xorshift_rng: SEED must be non-zero");

endmodule
