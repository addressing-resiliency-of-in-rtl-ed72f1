// tb_fp_exp_sub: checks the exponent-subtraction stage on random and
// edge-case operands: ordering by magnitude, both exponents (subnormals
// read with exponent 1), significands with their hidden bits, effective
// operation, result sign and the NaN/infinity/invalid classification.
module tb_fp_exp_sub;
  import fame_pkg::*;
  import tb_fp_ref_pkg::*;
  fp32_t a, b;
  logic sub;
  es_t es;
  int checks = 0, failures = 0;

  fp_exp_sub dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s = %h expected %h (a=%h b=%h sub=%b)", what, got, exp, a, b, sub);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] hi, lo;
      logic bs, a_first, anan, bnan, ainf, binf;
      int eh, el;
      a = rand_fp();
      b = (n % 3 == 0) ? near_fp(a) : rand_fp();
      sub = $urandom_range(0, 1);
      #1;
      bs = b.sign ^ sub;
      a_first = (a[30:0] >= b[30:0]);
      hi = a_first ? a : b;
      lo = a_first ? b : a;
      eh = (hi[30:23] == 0) ? 1 : hi[30:23];
      el = (lo[30:23] == 0) ? 1 : lo[30:23];
      anan = is_nan(a); bnan = is_nan(b);
      ainf = (a[30:0] == 31'h7F800000); binf = (b[30:0] == 31'h7F800000);
      check("eff_sub", es.eff_sub, a.sign ^ bs);
      check("sign", es.sign, a_first ? a.sign : bs);
      check("exp_big", es.exp_big, eh);
      check("exp_small", es.exp_small, el);
      check("sig_big", es.sig_big, {hi[30:23] != 0, hi[22:0]});
      check("sig_small", es.sig_small, {lo[30:23] != 0, lo[22:0]});
      check("invalid", es.invalid, ainf && binf && (a.sign != bs));
      check("is_nan", es.is_nan, anan || bnan || (ainf && binf && (a.sign != bs)));
      check("is_inf", es.is_inf, (ainf || binf) && !(anan || bnan || (ainf && binf && (a.sign != bs))));
      if (es.is_inf) check("inf_sign", es.inf_sign, ainf ? a.sign : bs);
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
