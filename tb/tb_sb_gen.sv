// tb_sb_gen: self-checking test of the stochastic bitstream generator.
//
// A reference xorshift32 model in the testbench predicts every output bit for
// several probabilities (0, 1.0, and values between), including cycles with the
// generator paused. It also checks that the fraction of 1s over a long run matches p.
module tb_sb_gen;
  localparam int unsigned PW   = 16;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0;
  logic [PW:0] p = '0;
  logic bit_o;
  int checks = 0, failures = 0;

  sb_gen #(.PW(PW), .SEED(SEED)) dut (.clk, .rst_n, .en, .p, .bit_o);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] xs(input logic [31:0] s);
    s = s ^ (s << 13);
    s = s ^ (s >> 17);
    s = s ^ (s << 5);
    return s;
  endfunction

  logic [31:0] ref_s;

  task automatic run_p(input logic [PW:0] pv, input int n);
    int ones = 0;
    real frac, want;
    p = pv;
    for (int k = 0; k < n; k++) begin
      en = ($urandom_range(0, 9) != 0);   // pause 10 % of the cycles
      #1;
      checks++;
      if (bit_o !== ((ref_s[31:16] < pv) ? 1'b1 : 1'b0)) begin
        failures++;
        if (failures < 10) $display("bit mismatch p=%0d cycle %0d", pv, k);
      end
      ones += int'(bit_o);
      @(posedge clk);
      if (en) ref_s = xs(ref_s);
      #1;
    end
    frac = real'(ones) / real'(n);
    want = real'(pv) / 65536.0;
    checks++;
    if (frac < want - 0.02 || frac > want + 0.02) begin
      failures++;
      $display("rate p=%0d: got %f want %f", pv, frac, want);
    end
  endtask

  initial begin
    ref_s = SEED;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run_p(17'd0, 2000);
    run_p(17'd65536, 2000);
    run_p(17'd1311, 20000);    // p0 = 0.02
    run_p(17'd32768, 10000);   // 0.5
    run_p(17'd52429, 10000);   // 0.8
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
