// op_element: one computational element (probability product) of the fusion matrix.
//
// A memory holds p_ij, a stochastic bitstream generator turns it into a random
// bit stream, and an AND gate combines that stream with the incoming stream
// b_{j,i-1}. For uncorrelated streams, P(b_out = 1) = P(b_in = 1) * p_ij, so a chain
// of elements multiplies the prior by each likelihood term (naive Bayesian fusion).
//
// Interface: we/wdata load the memory (one clock); en advances the generator;
// b_out = b_in AND generator bit, combinational, so a whole line of elements adds no
// clock of latency. The structure (memory -> generator -> AND) is the one described
// for the machine; the fixed-point width and the combinational gate are choices of
// this design.
module op_element #(
  parameter int unsigned PW   = sbm_pkg::PW,
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [PW:0] wdata,
  input  logic        en,
  input  logic        b_in,
  output logic        b_out
);

  logic [PW:0] p_q;
  logic        sb_bit;

  p_memory #(.PW(PW)) u_mem (
    .clk, .rst_n, .we, .wdata, .q(p_q)
  );

  sb_gen #(.PW(PW), .SEED(SEED)) u_gen (
    .clk, .rst_n, .en, .p(p_q), .bit_o(sb_bit)
  );

  assign b_out = b_in & sb_bit;

endmodule
