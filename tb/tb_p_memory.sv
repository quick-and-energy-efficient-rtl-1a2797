// tb_p_memory: self-checking test of the probability memory.
//
// Checks the reset value, that a write lands after one clock, and that the value
// holds while we is low and random data is presented.
module tb_p_memory;
  localparam int unsigned PW = 16;
  logic clk = 1'b0, rst_n = 1'b1, we = 1'b0;
  logic [PW:0] wdata = '0, q, model;
  int checks = 0, failures = 0;

  p_memory #(.PW(PW)) dut (.clk, .rst_n, .we, .wdata, .q);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    #1;
    checks++; if (q !== '0) failures++;
    @(posedge clk); #1 rst_n = 1'b1;
    model = '0;
    for (int k = 0; k < 1000; k++) begin
      we    = ($urandom_range(0, 3) == 0);
      wdata = (PW + 1)'($urandom_range(0, 65536));
      @(posedge clk);
      if (we) model = wdata;
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        $display("cycle %0d: q=%0d want %0d", k, q, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
