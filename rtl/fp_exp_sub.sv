// fp_exp_sub: first stage of the floating-point adder/subtractor, exponent
// subtraction.
//
// It unpacks both IEEE 754 single precision operands, applies the operation
// (sub = 1 flips the sign of b), orders the operands by magnitude and hands
// on both exponents; their difference, which the right shifter aligns by, is
// then formed in a DCIM adder array (see fame_fp_addsub). Ordering by the
// whole magnitude, not only the exponent, keeps the later significand
// subtraction non-negative. Subnormal operands are read with exponent 1 and a
// hidden bit of 0. NaN and infinity are detected here and carried to the end
// of the pipeline. The paper gives this stage's task (the first step of its
// flowchart) and its arrays (32*32 and 32*64 NAND); the comparison and swap
// here are plain logic. Purely combinational.
module fp_exp_sub
  import fame_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output es_t   es
);

  logic         b_sign;
  logic         a_nan, b_nan, a_inf, b_inf;
  logic         a_big;
  fp32_t        hi_op, lo_op;
  logic [7:0]   e_big, e_small;

  always_comb begin
    b_sign = b.sign ^ sub;
    a_nan  = (a.exp == 8'hFF) && (a.frac != '0);
    b_nan  = (b.exp == 8'hFF) && (b.frac != '0);
    a_inf  = (a.exp == 8'hFF) && (a.frac == '0);
    b_inf  = (b.exp == 8'hFF) && (b.frac == '0);

    a_big  = {a.exp, a.frac} >= {b.exp, b.frac};
    hi_op    = a_big ? a : b;
    lo_op  = a_big ? b : a;
    e_big   = (hi_op.exp   == '0) ? 8'd1 : hi_op.exp;
    e_small = (lo_op.exp == '0) ? 8'd1 : lo_op.exp;

    es.eff_sub   = a.sign ^ b_sign;
    es.sign      = a_big ? a.sign : b_sign;
    es.exp_big   = e_big;
    es.exp_small = e_small;
    es.sig_big   = {hi_op.exp != '0, hi_op.frac};
    es.sig_small = {lo_op.exp != '0, lo_op.frac};

    es.invalid   = a_inf && b_inf && (a.sign != b_sign);
    es.is_nan    = a_nan || b_nan || es.invalid;
    es.is_inf    = (a_inf || b_inf) && !es.is_nan;
    es.inf_sign  = a_inf ? a.sign : b_sign;
  end

endmodule
