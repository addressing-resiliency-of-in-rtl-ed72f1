// fame_pkg: types and constants shared by the in-memory floating-point adder.
//
// The adder works on IEEE 754 single precision numbers (1 sign, 8 exponent,
// 23 fraction bits, bias 127). Significands are carried through the pipeline
// with the hidden bit and three extra low bits (guard, round, sticky), 27 bits
// in all; the fraction adder produces a 28-bit sum that includes the carry-out.
// The format and bias follow the paper; the guard/round/sticky width is this
// design's choice.
package fame_pkg;

  localparam int unsigned EXP_W  = 8;
  localparam int unsigned FRAC_W = 23;
  // hidden bit + fraction + guard, round, sticky
  localparam int unsigned SIG_W  = FRAC_W + 1 + 3;   // 27
  localparam int unsigned SUM_W  = SIG_W + 1;        // 28

  typedef struct packed {
    logic                  sign;
    logic [EXP_W-1:0]      exp;
    logic [FRAC_W-1:0]     frac;
  } fp32_t;

  localparam fp32_t QNAN = '{sign: 1'b0, exp: 8'hFF, frac: 23'h400000};

  // Output of the exponent-subtraction stage.
  typedef struct packed {
    logic              is_nan;     // result is NaN (NaN operand or inf - inf)
    logic              is_inf;     // result is infinity
    logic              inf_sign;
    logic              invalid;    // inf - inf
    logic              sign;       // sign of the operand with larger magnitude
    logic              eff_sub;    // effective operation is a subtraction
    logic [EXP_W-1:0]  exp_big;    // biased exponent of larger operand (subnormals read as 1)
    logic [EXP_W-1:0]  exp_small;  // biased exponent of smaller operand (subnormals read as 1)
    logic [FRAC_W:0]   sig_big;    // significand with hidden bit
    logic [FRAC_W:0]   sig_small;
  } es_t;

  // Side information carried alongside the significands from stage 2 on.
  typedef struct packed {
    logic              is_nan;
    logic              is_inf;
    logic              inf_sign;
    logic              invalid;
    logic              sign;
    logic              eff_sub;
    logic [EXP_W-1:0]  exp_big;
  } side_t;

  // Output of the normalisation (left shift) stage.
  typedef struct packed {
    logic [SIG_W-1:0]  mant;       // normalised significand, hidden bit at the top
    logic              inc;        // sum was shifted right by one: exponent + 1
    logic [4:0]        lshift;     // sum was shifted left by this much: exponent - lshift
    logic              zero;       // sum was exactly zero
  } norm_t;

  typedef struct packed {
    logic overflow;
    logic underflow;
    logic inexact;
    logic invalid;
  } fp_flags_t;

endpackage
