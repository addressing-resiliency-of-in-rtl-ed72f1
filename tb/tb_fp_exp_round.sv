// tb_fp_exp_round: checks the exponent and rounding stage by completing
// whole additions. The earlier stages (exponent subtraction, alignment,
// normalisation) are instantiated, the significand sum is formed in the
// testbench, and the packed result and the flags of fp_exp_round are compared
// with the exact reference: rounding to nearest even, renormalisation after a
// rounding carry, overflow to infinity, subnormal results, zeros and NaNs.
module tb_fp_exp_round;
  import fame_pkg::*;
  import tb_fp_ref_pkg::*;
  fp32_t a, b, result;
  logic sub;
  es_t es;
  logic [26:0] a_sig, b_sig;
  logic [27:0] sum;
  norm_t norm;
  side_t side;
  fp_flags_t flags;
  int checks = 0, failures = 0, n_ovf = 0, n_round_carry = 0;

  fp_exp_sub     u_es (.a, .b, .sub, .es);
  fp_right_shift u_rs (.sig_big(es.sig_big), .sig_small(es.sig_small), .diff(es.exp_big - es.exp_small), .a_sig, .b_sig);
  assign sum  = es.eff_sub ? {1'b0, a_sig} - {1'b0, b_sig} : {1'b0, a_sig} + {1'b0, b_sig};
  fp_left_shift  u_ls (.sum, .exp_big(es.exp_big), .norm);
  assign side = '{is_nan: es.is_nan, is_inf: es.is_inf, inf_sign: es.inf_sign,
                  invalid: es.invalid, sign: es.sign, eff_sub: es.eff_sub, exp_big: es.exp_big};
  logic [7:0] exp_adj;
  assign exp_adj = norm.inc ? es.exp_big + 8'd1 : es.exp_big - 8'(norm.lshift);
  fp_exp_round   dut (.norm, .side, .exp_adj, .result, .flags);

  initial begin
    for (int n = 0; n < 6000; n++) begin
      logic [31:0] e;
      a = rand_fp();
      b = (n % 3 == 0) ? near_fp(a) : rand_fp();
      if (n % 200 == 0) begin a = 32'h3f7fffff; b = 32'h33800000; end   // rounding carry
      sub = $urandom_range(0, 1);
      #1;
      e = ref_add(a, b, sub);
      checks += 2;
      if (!same_result(result, e)) begin failures++; $display("FAIL: %h %s %h = %h exp %h", a, sub ? "-" : "+", b, result, e); end
      if (flags.overflow != (e[30:0] == 31'h7F800000 && a[30:23] != 8'hFF && b[30:23] != 8'hFF)) begin
        failures++; $display("FAIL: overflow flag for %h %h", a, b);
      end
      if (flags.overflow) n_ovf++;
      if (norm.mant[26:3] == 24'hFFFFFF && flags.inexact && result[22:0] == 0) n_round_carry++;
    end
    checks += 2;
    if (n_ovf == 0) begin failures++; $display("FAIL: no overflow case"); end
    if (n_round_carry == 0) begin failures++; $display("FAIL: no rounding carry case"); end
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
