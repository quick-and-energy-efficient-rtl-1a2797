// likelihood_unit: feature matching likelihood as a fixed-point probability.
//
// Computes p = P0 + (1 - P0) * exp(-(fl - fr)^2 / (2 * SIGMA^2)), the likelihood that
// the right-image feature fr matches the left-image feature fl: close to 1 for equal
// features, falling to the floor P0 as the squared difference (the matching cost)
// grows. With fr = 0, P0 = pnm0 and SIGMA = sigma_nm the same unit gives the
// no-match probability, which depends on the square of the left vertical gradient.
//
// How: the result depends only on |fl - fr|, so a 256-entry table indexed by the
// absolute difference (clamped at 255, where every table value has long reached P0)
// holds the rounded values, computed from the formula when the design is elaborated.
// Output is PW+1 bits, 2**PW = 1.0. Purely combinational.
//
// The formula and its parameters follow the described model; the evaluated system
// ran this step in floating point outside the stochastic machine. The table form
// and its precision are this design's choice.
module likelihood_unit #(
  parameter real         P0    = 0.02,
  parameter real         SIGMA = 10.0,
  parameter int unsigned PW    = sbm_pkg::PW
) (
  input  sbm_pkg::feat_t fl,
  input  sbm_pkg::feat_t fr,
  output logic [PW:0]    p
);

  typedef logic [PW:0] table_t [256];

  function automatic table_t build_table();
    table_t t;
    for (int i = 0; i < 256; i++) begin
      real v;
      v = P0 + (1.0 - P0) * $exp(-(real'(i) * real'(i)) / (2.0 * SIGMA * SIGMA));
      t[i] = (PW + 1)'($rtoi(v * (2.0 ** PW) + 0.5));
    end
    return t;
  endfunction

  localparam table_t LUT = build_table();

  logic signed [sbm_pkg::FW:0] diff;
  logic        [sbm_pkg::FW:0] mag;
  logic        [7:0]           idx;

  always_comb begin
    diff = (sbm_pkg::FW + 1)'(fl) - (sbm_pkg::FW + 1)'(fr);
    mag  = diff[sbm_pkg::FW] ? (sbm_pkg::FW + 1)'(-diff) : (sbm_pkg::FW + 1)'(diff);
    idx  = (mag > 255) ? 8'd255 : mag[7:0];
    p    = LUT[idx];
  end

endmodule
