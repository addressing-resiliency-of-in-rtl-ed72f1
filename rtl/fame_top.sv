// fame_top: the in-memory floating-point arithmetic design with its two
// stuck-at-LRS mitigation schemes.
//
// It holds
//   - the pipelined single precision adder/subtractor (fame_fp_addsub), whose
//     exponent subtraction and fraction addition run in DCIM sum-of-products
//     arrays protected by FTV on the AND plane and FTG on the OR plane, with the built-in FTV
//     test that finds the faulty cells;
//   - a bit-sliced DCIM compute array protected by SATO (sato_array), of the
//     64-wordline size the paper uses to evaluate its mitigation schemes,
//     with 16 sets of the three adder product terms.
// The paper evaluates SATO and FTV side by side on a generic array rather
// than attaching SATO to a particular stage of the adder, so the SATO array
// is a second compute array with its own ports. Its faulty-set flags come
// from outside because the paper gives no test circuit for SATO. Defect maps
// (*_stuck) are inputs so that faults can be injected.
//
// Timing: see the two sub-blocks. The adder takes one operation per cycle
// (one per two cycles after a fault was found) with a latency of 11 cycles (21 in two-cycle mode);
// the SATO array one operation per cycle (per two with a faulty set) with a
// result one cycle after acceptance.
module fame_top
  import fame_pkg::*;
#(
  parameter int unsigned SATO_SETS = 16,
  parameter int unsigned SATO_K    = 2,
  parameter int unsigned SATO_B    = 3
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // floating-point adder/subtractor
  input  logic                               fp_in_valid,
  output logic                               fp_in_ready,
  input  fp32_t                              fp_a,
  input  fp32_t                              fp_b,
  input  logic                               fp_sub,
  output logic                               fp_out_valid,
  output fp32_t                              fp_result,
  output fp_flags_t                          fp_flags,
  input  logic [3*SIG_W-1:0][4*SIG_W-1:0]    fp_and_stuck,
  input  logic [2*SIG_W-1:0][6*SIG_W-1:0]    fp_or_stuck,
  input  logic [3*EXP_W-1:0][4*EXP_W-1:0]    fp_exp_and_stuck,
  input  logic [2*EXP_W-1:0][6*EXP_W-1:0]    fp_exp_or_stuck,
  input  logic [3*EXP_W-1:0][4*EXP_W-1:0]    fp_inc_and_stuck,
  input  logic [2*EXP_W-1:0][6*EXP_W-1:0]    fp_inc_or_stuck,
  input  logic                               fp_test_start,
  output logic                               fp_test_busy,
  output logic                               fp_test_done,
  output logic                               fp_resilient,
  output logic                               fp_unfixable,
  // SATO-protected compute array
  input  logic                                                   sa_in_valid,
  output logic                                                   sa_in_ready,
  input  logic [SATO_SETS-1:0][SATO_K-1:0]                       sa_in_data,
  output logic                                                   sa_out_valid,
  output logic [SATO_SETS-1:0][SATO_B-1:0]                       sa_out_data,
  input  logic [SATO_SETS*SATO_B-1:0][SATO_SETS*2*SATO_K-1:0]    sa_cell_prog,
  input  logic [SATO_SETS*SATO_B-1:0][SATO_SETS*2*SATO_K-1:0]    sa_stuck,
  input  logic [SATO_SETS-1:0]                                   sa_f_set,
  output logic                                                   sa_sato_on,
  output logic                                                   sa_unfixable
);

  fame_fp_addsub u_fp (
    .clk, .rst_n,
    .in_valid(fp_in_valid), .in_ready(fp_in_ready),
    .a(fp_a), .b(fp_b), .sub(fp_sub),
    .out_valid(fp_out_valid), .result(fp_result), .flags(fp_flags),
    .and_stuck(fp_and_stuck), .or_stuck(fp_or_stuck),
    .exp_and_stuck(fp_exp_and_stuck), .exp_or_stuck(fp_exp_or_stuck),
    .inc_and_stuck(fp_inc_and_stuck), .inc_or_stuck(fp_inc_or_stuck),
    .test_start(fp_test_start), .test_busy(fp_test_busy),
    .test_done(fp_test_done), .resilient(fp_resilient),
    .unfixable(fp_unfixable)
  );

  sato_array #(.N_SET(SATO_SETS), .K(SATO_K), .B(SATO_B)) u_sato (
    .clk, .rst_n,
    .in_valid(sa_in_valid), .in_ready(sa_in_ready), .in_data(sa_in_data),
    .out_valid(sa_out_valid), .out_data(sa_out_data),
    .cell_prog(sa_cell_prog), .stuck_lrs(sa_stuck), .f_set(sa_f_set),
    .sato_on(sa_sato_on), .unfixable(sa_unfixable)
  );

endmodule
