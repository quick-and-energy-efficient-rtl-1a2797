// tb_overflow_counter_bank: self-checking test of the overflow counters.
//
// Drives random buses with per-line probabilities into a 6-line bank and compares
// counts, ovf and winner every cycle with a reference model: count 1s, stop when a
// counter reaches n_max, winner = last line if it is among those filling in that
// cycle, else the lowest such line. Runs use n_max = 1, 5 and 16, some with
// forced ties, and checks the counts stay frozen after the overflow.
module tb_overflow_counter_bank;
  localparam int unsigned M = 6, NMAX = 16, CW = 5;
  logic clk = 1'b0, rst_n = 1'b1, clear = 1'b0, en = 1'b0;
  logic [CW-1:0] n_max = 5'd16;
  logic [M-1:0] bits = '0;
  logic [M-1:0][CW-1:0] counts;
  logic ovf;
  logic [2:0] winner;
  int checks = 0, failures = 0, ties = 0, nm_wins = 0;

  overflow_counter_bank #(.M(M), .NMAX(NMAX)) dut (.clk, .rst_n, .clear, .en, .n_max, .bits, .counts, .ovf, .winner);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_cnt [M];
  bit ref_ovf;
  int ref_win;

  task automatic compare(input string where);
    checks++;
    if (ovf !== ref_ovf || (ref_ovf && winner !== 3'(ref_win))) begin
      failures++;
      $display("%s: ovf %0b/%0b winner %0d/%0d", where, ovf, ref_ovf, winner, ref_win);
    end
    for (int j = 0; j < M; j++) begin
      checks++;
      if (int'(counts[j]) != ref_cnt[j]) begin
        failures++;
        $display("%s: count[%0d] %0d want %0d", where, j, counts[j], ref_cnt[j]);
      end
    end
  endtask

  // prob[j] in 1/100; tie_at: cycle at which all lines in tie_mask are forced to 1
  task automatic one_run(input int nm, input int prob [M], input int extra);
    int cyc = 0;
    n_max = CW'(nm);
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    foreach (ref_cnt[j]) ref_cnt[j] = 0;
    ref_ovf = 0; ref_win = 0;
    compare("after clear");
    en = 1'b1;
    while (!ref_ovf || extra > 0) begin
      int filled [$];
      if (ref_ovf) extra--;
      for (int j = 0; j < M; j++) bits[j] = ($urandom_range(0, 99) < prob[j]);
      if (!ref_ovf) begin
        for (int j = 0; j < M; j++) begin
          if (bits[j]) ref_cnt[j]++;
          if (bits[j] && ref_cnt[j] == nm) filled.push_back(j);
        end
        if (filled.size() > 0) begin
          ref_ovf = 1;
          ref_win = filled[0];
          if (filled[filled.size()-1] == M - 1) ref_win = M - 1;
          if (filled.size() > 1) ties++;
          if (ref_win == M - 1) nm_wins++;
        end
      end
      @(posedge clk); #1;
      compare($sformatf("cycle %0d", cyc));
      cyc++;
      if (cyc > 5000) break;
    end
    en = 1'b0;
  endtask

  initial begin
    int pr [M];
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    pr = '{90, 40, 20, 10, 5, 30};   one_run(16, pr, 5);
    pr = '{10, 10, 80, 10, 10, 10};  one_run(5, pr, 3);
    pr = '{100, 0, 0, 0, 0, 100};    one_run(16, pr, 2);   // tie incl. last line
    pr = '{0, 100, 100, 0, 0, 0};    one_run(7, pr, 2);    // tie, lowest wins
    pr = '{30, 30, 30, 30, 30, 30};  one_run(1, pr, 4);
    for (int r = 0; r < 30; r++) begin
      foreach (pr[j]) pr[j] = $urandom_range(0, 100);
      pr[0] = 50;
      one_run($urandom_range(1, 16), pr, 2);
    end
    checks++;
    if (ties == 0 || nm_wins == 0) begin
      failures++;
      $display("tie rule not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
