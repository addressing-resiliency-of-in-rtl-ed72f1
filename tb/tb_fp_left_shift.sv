// tb_fp_left_shift: checks the normalisation stage. For random sums (with
// random numbers of leading zeros and carry-outs) and exponents it checks the
// right-shift case (with sticky), the left-shift amount limited by the
// exponent, that the normalised significand has its hidden bit set unless
// the limit stopped it, that no set bit is lost, and the zero flag.
module tb_fp_left_shift;
  import fame_pkg::*;
  logic [27:0] sum;
  logic [7:0] exp_big;
  norm_t norm;
  int checks = 0, failures = 0;

  fp_left_shift dut (.*);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s sum=%h exp=%0d", what, sum, exp_big); end
  endtask

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int lz, want;
      sum = 28'($urandom) >> $urandom_range(0, 28);
      if (n % 50 == 0) sum = '0;
      exp_big = 8'($urandom_range(1, 254));
      if (n % 4 == 0) exp_big = 8'($urandom_range(1, 30));
      #1;
      check("zero", norm.zero == (sum == 0));
      if (sum[27]) begin
        check("inc", norm.inc && norm.lshift == 0);
        check("right mant", norm.mant == {sum[27:2], sum[1] | sum[0]});
      end else begin
        lz = 27;
        for (int i = 26; i >= 0; i--) if (sum[i]) begin lz = 26 - i; break; end
        want = (lz < exp_big - 1) ? lz : exp_big - 1;
        check("no inc", !norm.inc);
        check("lshift", norm.lshift == 5'(want));
        check("left mant", norm.mant == 27'(sum[26:0] << want));
        if (sum != 0 && lz <= exp_big - 1) check("hidden bit", norm.mant[26]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
