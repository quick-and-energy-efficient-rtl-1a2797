// tb_fusion_matrix: self-checking test of the stochastic fusion matrix.
//
// A 4-line, 3-column matrix. Line 0 holds 1.0 everywhere, so its output must equal
// its random prior bit in every cycle; line 1 holds a 0 and must never fire; lines
// 2 and 3 hold fractional values and their output rates must match the product of
// the stored probabilities (the prior of those lines is always on). Rewriting one
// line must leave the others unchanged.
module tb_fusion_matrix;
  localparam int unsigned M = 4, N = 3, PW = 16;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0, we = 1'b0;
  logic [1:0] wrow = '0;
  logic [N-1:0][PW:0] wdata = '0;
  logic [M-1:0] prior = '1, post;
  int checks = 0, failures = 0;

  fusion_matrix #(.M(M), .N(N), .PW(PW)) dut (.clk, .rst_n, .en, .we, .wrow, .wdata, .prior, .post);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int row, input int a, input int b, input int c);
    en = 1'b0; we = 1'b1; wrow = 2'(row);
    wdata[0] = 17'(a); wdata[1] = 17'(b); wdata[2] = 17'(c);
    @(posedge clk); #1;
    we = 1'b0;
  endtask

  task automatic run(input int n, input real want2, input real want3);
    int ones2 = 0, ones3 = 0;
    en = 1'b1;
    for (int k = 0; k < n; k++) begin
      prior[0] = ($urandom_range(0, 9) < 7);
      #1;
      checks += 2;
      if (post[0] !== prior[0]) failures++;
      if (post[1] !== 1'b0) failures++;
      ones2 += int'(post[2]);
      ones3 += int'(post[3]);
      @(posedge clk); #1;
    end
    en = 1'b0;
    checks += 2;
    if (real'(ones2) / n - want2 > 0.012 || want2 - real'(ones2) / n > 0.012) begin
      failures++; $display("line 2 rate %f want %f", real'(ones2) / n, want2);
    end
    if (real'(ones3) / n - want3 > 0.012 || want3 - real'(ones3) / n > 0.012) begin
      failures++; $display("line 3 rate %f want %f", real'(ones3) / n, want3);
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    load(0, 65536, 65536, 65536);
    load(1, 65536, 0, 65536);
    load(2, 32768, 32768, 32768);          // 0.125
    load(3, 52429, 39322, 58982);          // 0.8 * 0.6 * 0.9 = 0.432
    run(40000, 0.125, 0.432);
    load(2, 65536, 65536, 65536);          // line 2 now always on
    run(20000, 1.0, 0.432);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
