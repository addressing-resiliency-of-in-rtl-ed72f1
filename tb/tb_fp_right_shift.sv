// tb_fp_right_shift: checks the alignment shifter for every shift distance
// from 0 to 40 and random significands against a model that shifts a 340-bit
// vector and ORs everything below the sticky position.
module tb_fp_right_shift;
  import fame_pkg::*;
  logic [23:0] sig_big, sig_small;
  logic [7:0]  diff;
  logic [26:0] a_sig, b_sig;
  int checks = 0, failures = 0;

  fp_right_shift dut (.*);

  initial begin
    for (int n = 0; n < 4000; n++) begin
      logic [339:0] v;
      logic [26:0] e;
      sig_big   = 24'($urandom);
      sig_small = 24'($urandom) | ((n % 2) ? 24'h800000 : 24'h0);
      if (n % 17 == 0) sig_small = 24'h800000;
      diff      = 8'(n % 41);
      if (n % 97 == 0) diff = 8'($urandom_range(41, 255));
      #1;
      // value with 3 low bits, placed at the top of a wide vector
      v = {sig_small, 3'b000, 313'd0} >> diff;
      e = v[339:313];
      e[0] = e[0] | (v[312:0] != 0);
      checks += 2;
      if (b_sig != e) begin failures++; $display("FAIL: %h >> %0d = %h exp %h", sig_small, diff, b_sig, e); end
      if (a_sig != {sig_big, 3'b000}) begin failures++; $display("FAIL: a_sig"); end
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
