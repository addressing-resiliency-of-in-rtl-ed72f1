// fp_left_shift: normalisation stage of the floating-point adder/subtractor.
//
// The 28-bit significand sum has its hidden-bit position at bit 26. If the
// addition carried into bit 27, the sum is shifted right by one (the lost bit
// joins the sticky bit) and inc tells the exponent stage to add one.
// Otherwise the sum is shifted left until bit 26 is set, by the number of
// leading zeros, but never further than the exponent allows (exp_big - 1),
// so a result too small for a normal number stays subnormal; lshift tells
// the exponent stage how much to subtract. A zero sum is flagged. This is the
// "normalize the sum" step of the paper's flowchart; the paper's 32*64
// left-shift array and SA-based shifter are replaced by a leading-zero
// counter and barrel shifter. Purely combinational.
module fp_left_shift
  import fame_pkg::*;
(
  input  logic [SUM_W-1:0]  sum,
  input  logic [EXP_W-1:0]  exp_big,
  output norm_t             norm
);

  logic [4:0] lz, lim, sh;

  always_comb begin
    lz = 5'd27;
    for (int i = 0; i <= 26; i++)
      if (sum[i]) lz = 5'(26 - i);
    lim = (exp_big > 8'd27) ? 5'd27 : 5'(exp_big - 8'd1);
    sh  = (lz < lim) ? lz : lim;

    norm.zero   = (sum == '0);
    norm.inc    = sum[SUM_W-1];
    norm.lshift = sum[SUM_W-1] ? 5'd0 : sh;
    if (sum[SUM_W-1])
      norm.mant = {sum[SUM_W-1:2], sum[1] | sum[0]};
    else
      norm.mant = sum[SIG_W-1:0] << sh;
  end

endmodule
