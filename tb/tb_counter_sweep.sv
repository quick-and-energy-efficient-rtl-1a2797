// tb_counter_sweep: workload test - the counter-maximum sweep 1..32.
//
// The machine is built with NMAX = 32 (6-bit counters) so that every counter
// maximum from 1 to 32 can be selected at run time. One pixel with graded
// likelihoods (one disparity at stream probability pa = L(10) = 0.614, a second at
// pb = L(14) * L(5) = 0.343, the rest at the floor) is loaded once and run 120
// times at each n_max. Checked for every n_max: the stronger disparity wins about
// as often as an exact calculation of the race predicts, the mean run time is n_max / pa within 10 % + 1 clock
// (it grows linearly with the counter maximum), and the mean normalised count of
// the runner-up approaches pb / pa as n_max grows (within 0.1 from n_max = 8 on).
module tb_counter_sweep;
  import sbm_pkg::*;
  localparam int unsigned D_MAX = 80, M = D_MAX + 2, NM = D_MAX + 1, NMAX = 32;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, start = 1'b0;
  logic [6:0] wr_row = '0;
  feat3_t wr_fl = '0, wr_fr = '0;
  logic [5:0] n_max = 6'd1;
  logic busy, done, no_match;
  logic [6:0] map_idx;
  logic [M-1:0][5:0] counts;
  logic [31:0] cycles;
  logic [M-1:0] post;

  disparity_machine #(.NMAX(NMAX)) dut (
    .clk, .rst_n, .wr_en, .wr_row, .wr_fl, .wr_fr, .start, .n_max,
    .busy, .done, .map_idx, .no_match, .counts, .cycles, .post
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real lh(input real p0, input real sg, input int d);
    return p0 + (1.0 - p0) * $exp(-(real'(d) * real'(d)) / (2.0 * sg * sg));
  endfunction

  // Probability that line A (stream rate pa) wins the race to n against B (pb) and
  // the no-match line C (pc), with the machine's tie rule (C first, then the lower
  // index, A). Exact dynamic programme over the counter states; the 79 lines at the
  // floor p0^3 are ignored.
  real dp [33][33][33];
  function automatic real p_win_a(input int n, input real pa, input real pb, input real pc);
    real q0, res, pr, pm;
    int na, nb, nc;
    res = 0.0;
    foreach (dp[i, j, k]) dp[i][j][k] = 0.0;
    dp[0][0][0] = 1.0;
    q0 = (1.0 - pa) * (1.0 - pb) * (1.0 - pc);
    for (int sum = 0; sum <= 3 * (n - 1); sum++)
      for (int a = 0; a < n; a++)
        for (int b = 0; b < n; b++) begin
          int c = sum - a - b;
          if (c < 0 || c >= n || dp[a][b][c] == 0.0) continue;
          pm = dp[a][b][c] / (1.0 - q0);
          for (int o = 1; o < 8; o++) begin
            pr = ((o & 1) ? pa : 1.0 - pa) * ((o & 2) ? pb : 1.0 - pb) * ((o & 4) ? pc : 1.0 - pc);
            na = a + (o & 1); nb = b + ((o >> 1) & 1); nc = c + ((o >> 2) & 1);
            if (nc == n) ;                      // no-match wins
            else if (na == n) res += pm * pr;   // A wins (also on a tie with B)
            else if (nb == n) ;                 // B wins
            else dp[na][nb][nc] += pm * pr;
          end
        end
    return res;
  endfunction

  initial begin
    feat3_t fl, fr;
    real pa, pb;
    fl.m = 9'sd100; fl.gv = 9'sd90; fl.gh = 9'sd10;
    pa = lh(0.02, 10.0, 10);
    pb = lh(0.02, 10.0, 14) * lh(0.02, 10.0, 5);
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int d = 0; d < M; d++) begin
      fr = '{m: -9'sd100, gv: -9'sd90, gh: 9'sd120};     // far from fl: floor p0
      if (d == 10) begin fr = fl; fr.m = 9'sd90; end
      if (d == 20) begin fr = fl; fr.m = 9'sd86; fr.gh = 9'sd5; end
      wr_en = 1'b1; wr_row = 7'(d); wr_fl = fl; wr_fr = (d == NM) ? '0 : fr;
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
    for (int nm = 1; nm <= 32; nm++) begin
      int wins, runs;
      real cyc, c20, want, pw;
      wins = 0; runs = 120; cyc = 0.0; c20 = 0.0;
      n_max = 6'(nm);
      for (int r = 0; r < runs; r++) begin
        start = 1'b1; @(posedge clk); #1; start = 1'b0;
        while (!done) begin @(posedge clk); #1; end
        if (map_idx == 7'd10) wins++;
        cyc += real'(cycles);
        c20 += real'(counts[20]) / real'(nm);
      end
      cyc = cyc / runs;
      c20 = c20 / runs;
      want = real'(nm) / pa;
      pw = p_win_a(nm, pa, pb, lh(0.01, 8.0, 90));
      $display("n_max=%2d  mean cycles %7.2f (n_max/pa %7.2f)  MAP=10 in %3d/%0d (exp. %4.2f)  mean n20/n_max %5.3f (pb/pa %5.3f)",
               nm, cyc, want, wins, runs, pw, c20, pb / pa);
      chk(cyc > want * 0.9 - 1.0 && cyc < want * 1.1 + 1.0, $sformatf("n_max=%0d: mean run time", nm));
      chk(real'(wins) / runs > pw - 0.15, $sformatf("n_max=%0d: MAP %0d/%0d, expected %f", nm, wins, runs, pw));
      if (nm >= 8)
        chk(c20 > pb / pa - 0.1 && c20 < pb / pa + 0.1, $sformatf("n_max=%0d: runner-up count", nm));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
