// disparity_machine: stochastic Bayesian machine computing the disparity
// distribution of one pixel (top level).
//
// The posterior over the disparities d = 0..D_MAX of a pixel is the product of three
// feature-matching likelihoods (luminance average m, vertical gradient gV,
// horizontal gradient gH) under a uniform prior. The machine has D_MAX+2 lines: one
// per disparity and a no-match line. Each line is a chain of three computational
// elements (memory, random bitstream generator, AND gate); its stream starts always
// on (uniform prior) and each element multiplies its probability by one
// likelihood. The no-match line holds 1.0 in its m and gH elements and, in its gV
// element, P(nomatch) = pnm0 + (1-pnm0) exp(-gV_l^2 / (2 sigma_nm^2)), which is
// large in weakly textured areas and, through the floor pnm0, also ends runs on
// occluded pixels where every disparity has a small probability. A counter per
// line counts the 1s of its stream; the first counter to reach n_max stops the run:
// its index is the MAP disparity (or "no match"), and counts[j] / n_max is the
// distribution normalised to its maximum.
//
// Use, per pixel:
//   1. Load (not busy): D_MAX+2 clocks of wr_en, one per line. For line d
//      (wr_row = d <= D_MAX) give the left features at (x, y) on wr_fl and the right
//      features at (x - d, y) on wr_fr; the three likelihood units turn them into
//      probabilities. For the no-match line (wr_row = D_MAX+1) only wr_fl.gv is used.
//   2. Pulse start with n_max (1..NMAX) valid; keep n_max stable until done.
//   3. done rises 2 + cycles clocks after the start pulse (one clear clock, cycles
//      run clocks, one clock to register the overflow); map_idx, no_match, counts and
//      cycles then hold until the next start. With a line whose three likelihoods are
//      all 1.0 the run takes exactly n_max clocks.
// post is the posterior stochastic bus itself, for use by further stochastic stages.
//
// Follows the described machine: the line/column structure (246 generators for
// D_MAX = 80), the column order m, gV, gH, the uniform prior, Eqs. for the
// likelihoods and for P(nomatch), the parameter values and the stop-at-first-
// overflow read-out. This design's own choices: fixed-point probabilities with 16
// fraction bits, xorshift generators, loading one line per clock through table-based
// likelihood units, the run-time n_max, and the tie rule of the counter bank (a tie
// that includes the no-match line is reported as no match).
module disparity_machine
  import sbm_pkg::*;
#(
  parameter int unsigned D_MAX    = 80,
  parameter int unsigned NMAX     = 16,
  parameter real         P0       = 0.02,
  parameter real         SIGMA_M  = 10.0,
  parameter real         SIGMA_GV = 10.0,
  parameter real         SIGMA_GH = 10.0,
  parameter real         PNM0     = 0.01,
  parameter real         SIGMA_NM = 8.0,
  localparam int unsigned M   = D_MAX + 2,
  localparam int unsigned RW  = $clog2(M),
  localparam int unsigned CW  = $clog2(NMAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // likelihood loading
  input  logic                 wr_en,
  input  logic [RW-1:0]        wr_row,
  input  feat3_t               wr_fl,
  input  feat3_t               wr_fr,
  // run control
  input  logic                 start,
  input  logic [CW-1:0]        n_max,
  output logic                 busy,
  output logic                 done,
  // results
  output logic [RW-1:0]        map_idx,
  output logic                 no_match,
  output logic [M-1:0][CW-1:0] counts,
  output logic [31:0]          cycles,
  output logic [M-1:0]         post
);

  localparam logic [RW-1:0] NM_ROW = RW'(D_MAX + 1);

  // ---------------- likelihoods of the line being written ----------------
  prob_t lh_m, lh_gv, lh_gh, lh_nm;

  likelihood_unit #(.P0(P0),   .SIGMA(SIGMA_M),  .PW(PW)) u_lh_m  (.fl(wr_fl.m),  .fr(wr_fr.m),  .p(lh_m));
  likelihood_unit #(.P0(P0),   .SIGMA(SIGMA_GV), .PW(PW)) u_lh_gv (.fl(wr_fl.gv), .fr(wr_fr.gv), .p(lh_gv));
  likelihood_unit #(.P0(P0),   .SIGMA(SIGMA_GH), .PW(PW)) u_lh_gh (.fl(wr_fl.gh), .fr(wr_fr.gh), .p(lh_gh));
  likelihood_unit #(.P0(PNM0), .SIGMA(SIGMA_NM), .PW(PW)) u_lh_nm (.fl(wr_fl.gv), .fr('0),       .p(lh_nm));

  logic [NCOL-1:0][PW:0] row_p;

  always_comb begin
    if (wr_row == NM_ROW) begin
      row_p[COL_M]  = P_ONE;
      row_p[COL_GV] = lh_nm;
      row_p[COL_GH] = P_ONE;
    end else begin
      row_p[COL_M]  = lh_m;
      row_p[COL_GV] = lh_gv;
      row_p[COL_GH] = lh_gh;
    end
  end

  // ---------------- sequencer ----------------
  logic clear, run, ovf;

  disparity_ctrl #(.CYC_W(32)) u_ctrl (
    .clk, .rst_n, .start, .ovf, .clear, .run, .busy, .done, .cycles
  );

  // ---------------- fusion matrix: M lines x 3 columns ----------------
  fusion_matrix #(.M(M), .N(NCOL), .PW(PW)) u_matrix (
    .clk,
    .rst_n,
    .en   (run),
    .we   (wr_en && !busy),
    .wrow (wr_row),
    .wdata(row_p),
    .prior({M{1'b1}}),       // uniform prior: always-on streams
    .post
  );

  // ---------------- counters, overflow detection, MAP ----------------
  overflow_counter_bank #(.M(M), .NMAX(NMAX)) u_counters (
    .clk, .rst_n, .clear, .en(run), .n_max, .bits(post), .counts, .ovf, .winner(map_idx)
  );

  assign no_match = done && (map_idx == NM_ROW);

  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && busy))
    else $error("disparity_machine: likelihood write while busy");
  a_row_range: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (wr_row <= NM_ROW))
    else $error("disparity_machine: wr_row out of range");

endmodule
