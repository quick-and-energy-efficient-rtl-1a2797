// p_memory: the probability memory of one computational element.
//
// Stores the value p_ij = C_i * P(K_i | S = S_j) that the element's generator
// turns into a bitstream. It is written once per pixel, before the run, and held
// while the generators run. One PW+1-bit register with a synchronous write enable;
// reset clears it to 0 (a stream that is always off).
//
// The memory's place in the element follows the described machine; its width,
// single-register form and reset value are this design's choice.
module p_memory #(
  parameter int unsigned PW = sbm_pkg::PW
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [PW:0] wdata,
  output logic [PW:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (we) q <= wdata;
  end

endmodule
