// fp_exp_round: exponent increment/decrement, rounding and exception stage of
// the floating-point adder/subtractor.
//
// The exponent of the larger operand, corrected by the normalisation (plus
// one after a right shift, minus the left-shift count), comes in as exp_adj:
// in fame_fp_addsub a DCIM adder array forms it (the paper's exponent
// increment/decrement array). norm.inc, norm.lshift and side.exp_big are
// therefore not read here. The 27-bit
// significand is rounded to 24 bits, round to nearest with ties to even, from
// its guard, round and sticky bits. If rounding carries out of the
// significand (1.11..1 + 1) the result is renormalised by one right shift and
// one more exponent increment, the "still normalized?" loop of the paper's
// flowchart. An exponent of 255 or more is an overflow and gives infinity;
// a result left with hidden bit 0 is encoded as subnormal. Flags: overflow,
// underflow (the result is subnormal; a sum of two floats that is that small
// is always exact, so "tiny and inexact" could never fire), inexact, invalid
// (inf - inf). NaN results are
// the quiet NaN 0x7FC00000. An exact zero sum is +0, except that the sum of two
// zeros of the same sign keeps that sign. The rounding mode and flag set are
// this design's choice; the paper names only the rounding step and the
// overflow/underflow exception. Purely combinational.
module fp_exp_round
  import fame_pkg::*;
(
  input  norm_t      norm,
  input  side_t      side,
  input  logic [EXP_W-1:0] exp_adj,
  output fp32_t      result,
  output fp_flags_t  flags
);

  logic signed [9:0] e;
  logic [24:0]       m;
  logic              g, r, s, up, inexact;

  always_comb begin
    e       = $signed({2'b00, exp_adj});
    g       = norm.mant[2];
    r       = norm.mant[1];
    s       = norm.mant[0];
    inexact = g | r | s;
    up      = g & (r | s | norm.mant[3]);
    m       = {1'b0, norm.mant[SIG_W-1:3]} + 25'(up);
    if (m[24]) begin
      m = m >> 1;
      e = e + 10'sd1;
    end

    flags  = '0;
    result = '0;
    if (side.is_nan) begin
      result        = QNAN;
      flags.invalid = side.invalid;
    end else if (side.is_inf) begin
      result = '{sign: side.inf_sign, exp: 8'hFF, frac: '0};
    end else if (norm.zero) begin
      result = '{sign: side.sign & ~side.eff_sub, exp: '0, frac: '0};
    end else if (e >= 10'sd255) begin
      result         = '{sign: side.sign, exp: 8'hFF, frac: '0};
      flags.overflow = 1'b1;
      flags.inexact  = 1'b1;
    end else begin
      result.sign = side.sign;
      result.exp  = m[23] ? e[7:0] : 8'd0;
      result.frac = m[22:0];
      flags.inexact   = inexact;
      flags.underflow = !m[23];
    end
  end

endmodule
