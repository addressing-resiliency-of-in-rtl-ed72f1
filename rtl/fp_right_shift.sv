// fp_right_shift: alignment stage of the floating-point adder/subtractor.
//
// The significand of the smaller operand is shifted right by the exponent
// difference. Three bits are kept below the significand (guard, round,
// sticky); every bit shifted past them is ORed into the sticky bit, so the
// later rounding sees whether anything non-zero was lost. A difference of 27
// or more leaves only the sticky bit. The larger significand gets three zero
// bits appended. The paper lists a dedicated 8*16 right-shift array and an
// in-memory shift circuit in the SA peripherals, but the section describing
// that circuit is not part of the available text, so this is a plain barrel
// shifter. Purely combinational.
module fp_right_shift
  import fame_pkg::*;
(
  input  logic [FRAC_W:0]   sig_big,
  input  logic [FRAC_W:0]   sig_small,
  input  logic [EXP_W-1:0]  diff,
  output logic [SIG_W-1:0]  a_sig,
  output logic [SIG_W-1:0]  b_sig
);

  logic [2*SIG_W-1:0] ext;     // small significand followed by room for lost bits
  logic [2*SIG_W-1:0] shifted;
  logic               sticky;

  always_comb begin
    a_sig   = {sig_big, 3'b000};
    ext     = {sig_small, 3'b000, {SIG_W{1'b0}}};
    shifted = (diff >= EXP_W'(SIG_W)) ? '0 : (ext >> diff);
    if (diff >= EXP_W'(SIG_W))
      sticky = |sig_small;
    else
      sticky = |shifted[SIG_W-1:0];
    b_sig   = shifted[2*SIG_W-1:SIG_W] | {{(SIG_W-1){1'b0}}, sticky};
  end

endmodule
