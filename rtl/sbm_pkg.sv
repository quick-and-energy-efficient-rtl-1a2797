// sbm_pkg: types and constants shared by the stochastic Bayesian disparity machine.
//
// A probability is carried as an unsigned fixed-point number with PW fraction bits
// and one extra integer bit, so that 1.0 (2**PW) is exact: a stream of probability
// 1.0 is "always on", which the uniform prior and the constant elements of the
// no-match line need. Feature values are 9-bit signed: the averaging filter gives
// 0..255 and the two gradients -127..127. The widths are this design's choice; the
// value ranges and the column order (m, gV, gH) follow the described machine.
package sbm_pkg;

  // Fraction bits of a probability.
  localparam int unsigned PW = 16;
  typedef logic [PW:0] prob_t;
  localparam prob_t P_ONE  = prob_t'(1) << PW;

  // Feature values from the three 5x5 filters.
  localparam int unsigned FW = 9;
  typedef logic signed [FW-1:0] feat_t;

  // One pixel's features, one field per filter.
  typedef struct packed {
    feat_t m;   // luminance average
    feat_t gv;  // vertical gradient
    feat_t gh;  // horizontal gradient
  } feat3_t;

  // Columns of the fusion matrix, in the order the streams pass through them.
  typedef enum int unsigned {
    COL_M  = 0,
    COL_GV = 1,
    COL_GH = 2
  } col_e;
  localparam int unsigned NCOL = 3;

  // Per-pixel sequencer states.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_CLEAR = 2'd1,
    ST_RUN   = 2'd2,
    ST_DONE  = 2'd3
  } ctrl_state_e;

  // Seed of the generator at linear position k of a matrix: a multiplicative hash
  // (golden-ratio constant) so that neighbouring generators start far apart on the
  // xorshift cycle. Never zero, which would lock the generator.
  function automatic logic [31:0] gen_seed(input int unsigned k);
    logic [31:0] s;
    s = (32'(k) + 32'd1) * 32'h9E37_79B9;
    s = s ^ (s >> 15) ^ 32'h2545_F491;
    return (s == 32'd0) ? 32'h1 : s;
  endfunction

endpackage
