// sb_gen: stochastic bitstream generator.
//
// Emits, on every clock where it is enabled, a random bit that is 1 with
// probability p / 2**PW. The bit is 1 when the upper PW bits of a 32-bit xorshift
// pseudo-random state are below p; p = 2**PW therefore gives a stream that is
// always 1 and p = 0 one that is always 0. Every generator of the machine has its
// own state and seed, so the streams it produces are mutually uncorrelated, which
// the AND-gate product needs.
//
// Interface: en advances the state by one xorshift step at the clock edge; bit_o
// is combinational from the current state and p, so a new p acts in the same cycle.
// Reset loads SEED (must be non-zero).
//
// The generator's role (turn a stored probability into a bitstream) is that of the
// described machine; the random source is this design's choice. The evaluated
// machine was simulated with a Mersenne-twister generator per stream and a
// physical one would use a spintronic random device; a xorshift register is the
// smallest digital stand-in with good enough statistics.
module sb_gen #(
  parameter int unsigned PW   = sbm_pkg::PW,
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [PW:0] p,
  output logic        bit_o
);

  logic [31:0] state, nxt;

  always_comb begin
    nxt = state;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 17);
    nxt = nxt ^ (nxt << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= nxt;
  end

  assign bit_o = ({1'b0, state[31 -: PW]} < p);

  initial assert (SEED != 32'd0) else $error("sb_gen: SEED must be non-zero");

endmodule
