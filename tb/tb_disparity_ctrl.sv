// tb_disparity_ctrl: self-checking test of the per-pixel sequencer.
//
// A stand-in for the counter bank raises ovf (registered) K run-cycles after the
// clear. The test checks one clear cycle per start, run high for exactly K cycles,
// cycles = K, done from the cycle after ovf until the next start, busy in between,
// and that start is ignored while busy.
module tb_disparity_ctrl;
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0, ovf = 1'b0;
  logic clear, run, busy, done;
  logic [31:0] cycles;
  int checks = 0, failures = 0;
  int run_cnt = 0, target = 0;

  disparity_ctrl #(.CYC_W(32)) dut (.clk, .rst_n, .start, .ovf, .clear, .run, .busy, .done, .cycles);
  always #5 clk = ~clk;

  // counter-bank stand-in
  always_ff @(posedge clk) begin
    if (clear) begin
      run_cnt <= 0;
      ovf     <= 1'b0;
    end else if (run) begin
      run_cnt <= run_cnt + 1;
      if (run_cnt + 1 == target) ovf <= 1'b1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s at %0t", msg, $time); end
  endtask

  task automatic pixel(input int k);
    int runs = 0, clears = 0, lat = 0;
    target = k;
    start = 1'b1; @(posedge clk); #1; start = 1'b0;
    while (!done) begin
      chk(busy, "busy during pixel");
      if (clear) clears++;
      if (run) runs++;
      // a second start while busy must be ignored
      start = (lat == 3);
      @(posedge clk); #1;
      start = 1'b0;
      lat++;
      if (lat > 10000) break;
    end
    chk(clears == 1, "one clear cycle");
    chk(runs == k, $sformatf("run cycles %0d want %0d", runs, k));
    chk(cycles == 32'(k), $sformatf("cycles %0d want %0d", cycles, k));
    chk(lat == k + 2, $sformatf("start-to-done %0d want %0d", lat, k + 2));
    repeat (3) begin
      @(posedge clk); #1;
      chk(done && !busy && !run, "done holds");
      chk(cycles == 32'(k), "cycles hold");
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    #2;
    chk(!busy && !done && !run && !clear, "idle after reset");
    @(posedge clk); #1 rst_n = 1'b1;
    repeat (3) begin @(posedge clk); #1; chk(!busy && !done, "idle waits"); end
    pixel(16);
    pixel(1);
    pixel(5);
    for (int r = 0; r < 20; r++) pixel($urandom_range(1, 300));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
