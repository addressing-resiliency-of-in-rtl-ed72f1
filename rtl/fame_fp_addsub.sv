// fame_fp_addsub: pipelined IEEE 754 single precision adder/subtractor whose
// exponent subtraction and significand addition run in RRAM DCIM arrays
// with FTV/FTG fault mitigation.
//
// Stages, in the order of the paper's flowchart and area table:
//   1  operand ordering and classification (fp_exp_sub)   -> register r1
//   2  exponent subtraction, AND plane (u_ea, 8-bit DCIM adder)
//   3  exponent subtraction, OR plane + carry select
//   4  right shift / alignment (fp_right_shift)           -> register a2/b2
//   5  fraction addition, AND plane (u_fa, 27-bit DCIM adder)
//   6  fraction addition, OR plane + carry select         -> register r5
//   7  left shift / normalisation (fp_left_shift)         -> register r6
//   8  exponent inc/dec, AND plane (u_xa, 8-bit DCIM adder)
//   9  exponent inc/dec, OR plane + carry select
//  10  rounding and exceptions (fp_exp_round)             -> output register
// Side information (signs, exponents, significands, special cases) travels
// in registers beside the arrays. Every register, including the
// sense-amplifier latches of the three arrays, moves on one advance signal
// adv. The arrays are locked together (peer_slow/peer_busy): if any has a
// faulty bitline all work in two cycles, and all stall while any is tested.
// So the pipeline takes one operation per cycle normally and one per two
// cycles once FTV/FTG is on (the paper's 50% performance cost). Latency is
// 11 adv steps: 11 cycles, or 21 in FTV mode, where acceptance and output
// both fall on a two-cycle boundary.
//
// Array programs. Exponent difference: exp_big + ~exp_small + 1. Exponent
// inc/dec: exp_big + 0 + 1 after a one-bit right shift, exp_big + ~lshift + 1
// after a left shift; both fit in 8 bits (the left shift is limited to
// exp_big - 1, and exp_big + 1 is at most 255), so the carry-out is dropped.
// The comparison/swap, the shifts and the rounding increment are plain logic.
// Unread on purpose: the arrays' own out_valid and test_done (the pipeline
// valid bits and the combined test_done replace them), the dropped carry-out
// of the two exponent sums, and exp_small after the difference is formed.
//
// Interface: in_valid/in_ready with operands a, b and op (sub = 1 for
// a - b); out_valid pulses with result and flags. and_stuck/or_stuck and
// exp_and_stuck/exp_or_stuck mark defective cells of the fraction and
// exponent-difference arrays and inc_and_stuck/inc_or_stuck those of the
// exponent inc/dec arrays (for fault injection); test_start runs the FTV
// test of all arrays, test_busy is high until all are done and test_done pulses
// in the first cycle after; resilient and unfixable report the outcome.
module fame_fp_addsub
  import fame_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  fp32_t                              a,
  input  fp32_t                              b,
  input  logic                               sub,
  output logic                               out_valid,
  output fp32_t                              result,
  output fp_flags_t                          flags,
  input  logic [3*SIG_W-1:0][4*SIG_W-1:0]    and_stuck,
  input  logic [2*SIG_W-1:0][6*SIG_W-1:0]    or_stuck,
  input  logic [3*EXP_W-1:0][4*EXP_W-1:0]    exp_and_stuck,
  input  logic [2*EXP_W-1:0][6*EXP_W-1:0]    exp_or_stuck,
  input  logic [3*EXP_W-1:0][4*EXP_W-1:0]    inc_and_stuck,
  input  logic [2*EXP_W-1:0][6*EXP_W-1:0]    inc_or_stuck,
  input  logic                               test_start,
  output logic                               test_busy,
  output logic                               test_done,
  output logic                               resilient,
  output logic                               unfixable
);

  logic adv, ea_adv, xa_adv;
  assign in_ready = adv;

  // stage 1: ordering and classification
  es_t es_d, r1, e2, e3;
  logic v1, ve2, ve3;
  fp_exp_sub u_es (.a, .b, .sub, .es(es_d));

  // stages 2-3: exponent difference exp_big - exp_small in the DCIM array
  logic [EXP_W:0] ediff;
  logic           ea_ready, ea_valid, ea_busy, ea_done, ea_res, ea_unfix;
  logic           fa_busy, fa_done, fa_res, fa_unfix;
  logic           xa_busy, xa_done, xa_res, xa_unfix;
  fp_frac_adder #(.W(EXP_W)) u_ea (
    .clk, .rst_n, .in_valid(1'b1), .in_ready(ea_ready), .adv(ea_adv),
    .a_sig(r1.exp_big), .b_sig(~r1.exp_small), .eff_sub(1'b1),
    .out_valid(ea_valid), .sum(ediff),
    .and_stuck(exp_and_stuck), .or_stuck(exp_or_stuck),
    .peer_slow(fa_res || xa_res), .peer_busy(fa_busy || xa_busy),
    .test_start, .test_busy(ea_busy), .test_done(ea_done),
    .resilient(ea_res), .unfixable(ea_unfix)
  );

  // stage 4: alignment
  logic [SIG_W-1:0] a_sig_d, b_sig_d, a2, b2;
  side_t            side_d, s2, s3, s4, s5, s6, s7, s8;
  logic             v2, v3, v4, v5, v6, v7, v8, vout;
  fp_right_shift u_rs (.sig_big(e3.sig_big), .sig_small(e3.sig_small),
                       .diff(ediff[EXP_W-1:0]), .a_sig(a_sig_d), .b_sig(b_sig_d));
  assign side_d = '{is_nan: e3.is_nan, is_inf: e3.is_inf, inf_sign: e3.inf_sign,
                    invalid: e3.invalid, sign: e3.sign, eff_sub: e3.eff_sub,
                    exp_big: e3.exp_big};

  // stages 5-6: fraction addition in the DCIM array
  logic [SUM_W-1:0] sum_d, r5;
  logic             fa_ready, fa_valid;
  fp_frac_adder u_fa (
    .clk, .rst_n, .in_valid(1'b1), .in_ready(fa_ready), .adv,
    .a_sig(a2), .b_sig(b2 ^ {SIG_W{s2.eff_sub}}), .eff_sub(s2.eff_sub),
    .out_valid(fa_valid), .sum(sum_d),
    .and_stuck, .or_stuck,
    .peer_slow(ea_res || xa_res), .peer_busy(ea_busy || xa_busy),
    .test_start, .test_busy(fa_busy), .test_done(fa_done),
    .resilient(fa_res), .unfixable(fa_unfix)
  );

  assign resilient = fa_res || ea_res || xa_res;
  assign unfixable = fa_unfix || ea_unfix || xa_unfix;
  assign test_busy = fa_busy || ea_busy || xa_busy;

  // test_done: first cycle after both testers have finished
  logic busy_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_q <= 1'b0;
    else        busy_q <= test_busy;
  end
  assign test_done = busy_q && !test_busy;

  // stage 7: normalisation
  norm_t norm_d, r6, r7, r8;
  fp_left_shift u_ls (.sum(r5), .exp_big(s5.exp_big), .norm(norm_d));

  // stages 8-9: exponent inc/dec in the DCIM array
  logic [EXP_W:0] eadj;
  logic           xa_ready, xa_valid;
  fp_frac_adder #(.W(EXP_W)) u_xa (
    .clk, .rst_n, .in_valid(1'b1), .in_ready(xa_ready), .adv(xa_adv),
    .a_sig(s6.exp_big),
    .b_sig(r6.inc ? '0 : ~{{(EXP_W-5){1'b0}}, r6.lshift}), .eff_sub(1'b1),
    .out_valid(xa_valid), .sum(eadj),
    .and_stuck(inc_and_stuck), .or_stuck(inc_or_stuck),
    .peer_slow(fa_res || ea_res), .peer_busy(fa_busy || ea_busy),
    .test_start, .test_busy(xa_busy), .test_done(xa_done),
    .resilient(xa_res), .unfixable(xa_unfix)
  );

  // stage 10: rounding and exceptions
  fp32_t     res_d;
  fp_flags_t flags_d;
  fp_exp_round u_er (.norm(r8), .side(s8), .exp_adj(eadj[EXP_W-1:0]),
                     .result(res_d), .flags(flags_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0; e2 <= '0; e3 <= '0; a2 <= '0; b2 <= '0; r5 <= '0; r6 <= '0;
      r7 <= '0; r8 <= '0;
      s2 <= '0; s3 <= '0; s4 <= '0; s5 <= '0; s6 <= '0; s7 <= '0; s8 <= '0;
      v1 <= 1'b0; ve2 <= 1'b0; ve3 <= 1'b0;
      v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0; v5 <= 1'b0; v6 <= 1'b0;
      v7 <= 1'b0; v8 <= 1'b0;
      vout <= 1'b0;
      result <= '0; flags <= '0;
    end else begin
      vout <= 1'b0;
      if (adv) begin
        r1 <= es_d;                 v1 <= in_valid;
        e2 <= r1;                   ve2 <= v1;
        e3 <= e2;                   ve3 <= ve2;
        a2 <= a_sig_d; b2 <= b_sig_d; s2 <= side_d; v2 <= ve3;
        s3 <= s2;                   v3 <= v2;
        s4 <= s3;                   v4 <= v3;
        r5 <= sum_d;   s5 <= s4;    v5 <= v4;
        r6 <= norm_d;  s6 <= s5;    v6 <= v5;
        r7 <= r6;      s7 <= s6;    v7 <= v6;
        r8 <= r7;      s8 <= s7;    v8 <= v7;
        result <= res_d; flags <= flags_d;
        vout <= v8;
      end
    end
  end

  assign out_valid = vout;

  // All arrays are offered an operand in every cycle (the pipeline's valid
  // bits travel beside them), so each must take one at every pipeline step,
  // and all must step together. Their own out_valid outputs are not
  // needed for the same reason and stay unread.
  a_arrays_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (fa_ready == adv) && (ea_ready == adv) && (ea_adv == adv) &&
    (xa_ready == adv) && (xa_adv == adv));

endmodule
