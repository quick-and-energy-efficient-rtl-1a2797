// overflow_counter_bank: counters that read a stochastic bus back into numbers.
//
// One saturating counter per bus line counts the 1s of its stream. The run ends in
// the cycle where a counter reaches the run-time maximum n_max ("overflows"): from
// the next clock every counter is frozen, ovf is high and winner holds the index of
// the overflowing line. At that point counts[j] / n_max is the posterior normalised
// to its largest value, and winner is the maximum a-posteriori line, so the bank is
// both the read-out and the MAP estimator.
//
// Interface: clear (synchronous) zeroes the counters and drops ovf; en gates
// counting. n_max is sampled every cycle and must stay in 1..NMAX during a run.
// Timing: the bit sampled in cycle t is in counts after the edge that ends t; if it
// completes a counter, ovf and winner are valid after that same edge.
//
// Counting until the first counter fills, and reading the MAP index from it, follow
// the described machine. The tie rule is this design's: if several counters fill in
// the same cycle, the last line (the no-match line of the disparity machine) wins
// when it is one of them, otherwise the lowest index does. A tie means the data did
// not single out one line, which is what the no-match line stands for.
module overflow_counter_bank #(
  parameter int unsigned M    = 82,
  parameter int unsigned NMAX = 16,
  localparam int unsigned CW  = $clog2(NMAX + 1),
  localparam int unsigned RW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 en,
  input  logic [CW-1:0]        n_max,
  input  logic [M-1:0]         bits,
  output logic [M-1:0][CW-1:0] counts,
  output logic                 ovf,
  output logic [RW-1:0]        winner
);

  logic [M-1:0]  fill;      // line j reaches n_max with this cycle's bit
  logic          any_fill;
  logic [RW-1:0] fill_idx;

  always_comb begin
    for (int j = 0; j < M; j++)
      fill[j] = bits[j] && ((counts[j] + CW'(1)) >= n_max);
    any_fill = en && !ovf && (fill != '0);
    fill_idx = '0;
    for (int j = M - 1; j >= 0; j--)
      if (fill[j]) fill_idx = RW'(j);
    if (fill[M-1]) fill_idx = RW'(M - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counts <= '0;
      ovf    <= 1'b0;
      winner <= '0;
    end else if (clear) begin
      counts <= '0;
      ovf    <= 1'b0;
      winner <= '0;
    end else if (en && !ovf) begin
      for (int j = 0; j < M; j++)
        if (bits[j] && counts[j] < n_max) counts[j] <= counts[j] + CW'(1);
      if (any_fill) begin
        ovf    <= 1'b1;
        winner <= fill_idx;
      end
    end
  end

  a_nmax_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 en |-> (n_max != '0 && n_max <= CW'(NMAX)))
    else $error("overflow_counter_bank: n_max out of range");
  a_frozen: assert property (@(posedge clk) disable iff (!rst_n)
                             (ovf && !clear) |=> $stable(counts))
    else $error("overflow_counter_bank: counts changed after overflow");

endmodule
