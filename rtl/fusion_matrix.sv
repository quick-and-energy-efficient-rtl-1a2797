// fusion_matrix: naive Bayesian fusion on stochastic buses.
//
// An M-line by N-column grid of op_element instances. Line j starts with the prior
// stream b_{j,0}; column i multiplies it by the stored likelihood p_ij, so the
// output stream b_{j,N} has probability P(S=S_j) * prod_i P(K_i | S=S_j), up to the
// bus normalisation constants. The M outputs form the posterior stochastic bus.
//
// Interface: while the generators are stopped (en = 0) the memories are loaded one
// line per clock: we with wrow = j writes the N values wdata[0..N-1] into line j
// (wdata[0] goes to the first column the stream meets). en advances all M*N
// generators together. post is combinational from prior and the generator states,
// so it changes on the clock edge after which the states moved.
//
// The grid, its prior/likelihood/posterior signals and the AND chaining follow the
// described architecture. Loading a whole line per clock and the per-generator seed
// hash are this design's choices.
module fusion_matrix #(
  parameter int unsigned M  = 82,
  parameter int unsigned N  = 3,
  parameter int unsigned PW = sbm_pkg::PW,
  // Offset added to the generator index before hashing it into a seed, so two
  // matrices in one system can be given different streams.
  parameter int unsigned SEED_BASE = 0,
  localparam int unsigned RW = (M > 1) ? $clog2(M) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                we,
  input  logic [RW-1:0]       wrow,
  input  logic [N-1:0][PW:0]  wdata,
  input  logic [M-1:0]        prior,
  output logic [M-1:0]        post
);

  // chain[j][i] is b_{j,i}.
  logic [N:0] chain [M];

  for (genvar j = 0; j < M; j++) begin : g_line
    assign chain[j][0] = prior[j];
    for (genvar i = 0; i < N; i++) begin : g_col
      op_element #(
        .PW  (PW),
        .SEED(sbm_pkg::gen_seed(SEED_BASE + j * N + i))
      ) u_op (
        .clk,
        .rst_n,
        .we   (we && (wrow == RW'(j))),
        .wdata(wdata[i]),
        .en,
        .b_in (chain[j][i]),
        .b_out(chain[j][i+1])
      );
    end
    assign post[j] = chain[j][N];
  end

  // Memories must not change under running generators.
  property p_no_load_while_running;
    @(posedge clk) disable iff (!rst_n) !(we && en);
  endproperty
  a_no_load_while_running: assert property (p_no_load_while_running)
    else $error("fusion_matrix: memory written while generators run");

endmodule
