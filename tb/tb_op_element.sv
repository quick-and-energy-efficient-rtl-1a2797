// tb_op_element: self-checking test of one computational element.
//
// Loads p into the element, drives a random input stream of known probability and
// checks every output bit against input AND a reference xorshift generator, then
// checks that the output rate is the product of the two probabilities.
module tb_op_element;
  localparam int unsigned PW   = 16;
  localparam logic [31:0] SEED = 32'hCAFE_0001;

  logic clk = 1'b0, rst_n = 1'b1, we = 1'b0, en = 1'b0, b_in = 1'b0, b_out;
  logic [PW:0] wdata = '0;
  int checks = 0, failures = 0;

  op_element #(.PW(PW), .SEED(SEED)) dut (.clk, .rst_n, .we, .wdata, .en, .b_in, .b_out);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
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

  // pin: probability of b_in in 1/1000; pv: stored p.
  task automatic run(input logic [PW:0] pv, input int pin, input int n);
    int ones = 0;
    real want;
    en = 1'b0;
    we = 1'b1; wdata = pv;
    @(posedge clk); #1;
    we = 1'b0;
    en = 1'b1;
    for (int k = 0; k < n; k++) begin
      b_in = ($urandom_range(0, 999) < pin);
      #1;
      checks++;
      if (b_out !== (b_in & ((ref_s[31:16] < pv) ? 1'b1 : 1'b0))) begin
        failures++;
        if (failures < 10) $display("mismatch p=%0d cycle %0d", pv, k);
      end
      ones += int'(b_out);
      @(posedge clk);
      ref_s = xs(ref_s);
      #1;
    end
    want = real'(pv) / 65536.0 * real'(pin) / 1000.0;
    checks++;
    if (real'(ones) / real'(n) < want - 0.015 || real'(ones) / real'(n) > want + 0.015) begin
      failures++;
      $display("rate: got %f want %f", real'(ones) / real'(n), want);
    end
  endtask

  initial begin
    ref_s = SEED;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(17'd65536, 1000, 500);   // 1 x 1
    run(17'd0, 1000, 500);       // 0 x 1
    run(17'd32768, 500, 20000);  // 0.5 x 0.5
    run(17'd52429, 300, 20000);  // 0.8 x 0.3
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
