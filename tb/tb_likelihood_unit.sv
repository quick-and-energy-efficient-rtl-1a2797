// tb_likelihood_unit: self-checking test of the likelihood table.
//
// Two instances: the feature likelihood (p0 = 0.02, sigma = 10) and the no-match
// probability (pnm0 = 0.01, sigma_nm = 8, right input 0). For random feature pairs
// over the full input ranges the output must equal the formula evaluated in the
// testbench, rounded, within one least significant bit.
module tb_likelihood_unit;
  import sbm_pkg::*;
  feat_t fl, fr;
  logic [16:0] p_lh, p_nm;
  int checks = 0, failures = 0;

  likelihood_unit #(.P0(0.02), .SIGMA(10.0)) u_lh (.fl, .fr, .p(p_lh));
  likelihood_unit #(.P0(0.01), .SIGMA(8.0))  u_nm (.fl, .fr('0), .p(p_nm));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_p(real p0, real sigma, int d);
    real v;
    v = p0 + (1.0 - p0) * $exp(-(real'(d) * real'(d)) / (2.0 * sigma * sigma));
    return int'($floor(v * 65536.0 + 0.5));
  endfunction

  task automatic check(input int got, input int want, input string what);
    checks++;
    if (got < want - 1 || got > want + 1) begin
      failures++;
      $display("%s fl=%0d fr=%0d: got %0d want %0d", what, fl, fr, got, want);
    end
  endtask

  initial begin
    // fixed points: equal features give 1.0, far features give p0
    fl = 9'sd100; fr = 9'sd100; #1;
    check(int'(p_lh), 65536, "equal");
    fl = 9'sd255; fr = 9'sd0; #1;
    check(int'(p_lh), 1311, "far");
    fl = 9'sd0; #1;
    check(int'(p_nm), 65536, "nomatch flat");
    fl = -9'sd127; #1;
    check(int'(p_nm), 655, "nomatch edge");
    for (int k = 0; k < 4000; k++) begin
      if (k % 2 == 0) begin
        fl = feat_t'($urandom_range(0, 255));
        fr = feat_t'($urandom_range(0, 255));
      end else begin
        fl = feat_t'(int'($urandom_range(0, 254)) - 127);
        fr = (k % 4 == 1) ? feat_t'(int'(fl) + int'($urandom_range(0, 40)) - 20)
                          : feat_t'(int'($urandom_range(0, 254)) - 127);
      end
      #1;
      check(int'(p_lh), expect_p(0.02, 10.0, int'(fl) - int'(fr)), "lh");
      check(int'(p_nm), expect_p(0.01, 8.0, int'(fl)), "nm");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
