// fp_frac_adder: significand adder of the floating-point adder/subtractor,
// built on an FTV/FTG-protected DCIM sum-of-products array.
//
// Per bit i of the aligned significands a and b (b already inverted for an
// effective subtraction) the DCIM array computes, in memory, the three
// product terms a.b, a.~b and ~a.b on three AND-plane bitlines (a "set" of
// three bitlines per adder bit, as the paper describes for its adder), and
// the OR plane turns them into generate g = a.b and propagate
// p = a.~b + ~a.b. A carry-select adder (the paper's choice of adder) then
// forms the carries from g and p in blocks of CSA_BLK bits: each block
// computes its carries for a carry-in of 0 and of 1 and the real block
// carry-in selects one. sum = p ^ carry. For a subtraction the carry-in is 1
// and the carry-out is dropped (the larger magnitude is always first, so the
// difference is non-negative).
//
// How the paper maps its carry-select adder onto its 64*64 arrays is not in
// the available text; the g/p split above and the block size are this design's
// choice.
//
// Timing: the array takes two pipeline steps (AND plane, OR plane); the
// carry-select logic is combinational on the OR latches. eff_sub travels
// along in two registers that advance with adv, so sum and out_valid appear
// two adv steps after the operand was accepted (two cycles normally, three
// in FTV mode, where the operand is applied for two cycles before it is
// accepted). The operand must be held while adv is low. peer_slow and
// peer_busy lock the array to other arrays of the same pipeline (see
// dcim_sop_array). The same adder, at 8 bits, forms the exponent difference
// and the exponent increment/decrement.
module fp_frac_adder
  import fame_pkg::*;
#(
  parameter int unsigned W       = SIG_W,
  parameter int unsigned CSA_BLK = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  output logic                          adv,
  input  logic [W-1:0]                  a_sig,
  input  logic [W-1:0]                  b_sig,
  input  logic                          eff_sub,
  output logic                          out_valid,
  output logic [W:0]                    sum,
  input  logic [3*W-1:0][4*W-1:0]       and_stuck,
  input  logic [2*W-1:0][6*W-1:0]       or_stuck,
  input  logic                          peer_slow,
  input  logic                          peer_busy,
  input  logic                          test_start,
  output logic                          test_busy,
  output logic                          test_done,
  output logic                          resilient,
  output logic                          unfixable
);

  localparam int unsigned N_IN  = 2 * W;
  localparam int unsigned N_PT  = 3 * W;
  localparam int unsigned N_OUT = 2 * W;

  typedef logic [N_PT-1:0][2*N_IN-1:0]  and_prog_t;
  typedef logic [N_OUT-1:0][2*N_PT-1:0] or_prog_t;

  // AND-plane wordlines of bit i: a 4i, ~a 4i+1, b 4i+2, ~b 4i+3.
  function automatic and_prog_t make_and_prog();
    and_prog_t p;
    for (int t = 0; t < int'(N_PT); t++) p[t] = '0;
    for (int i = 0; i < int'(W); i++) begin
      p[3*i][4*i]       = 1'b1;  p[3*i][4*i+2]     = 1'b1;   // a.b
      p[3*i+1][4*i]     = 1'b1;  p[3*i+1][4*i+3]   = 1'b1;   // a.~b
      p[3*i+2][4*i+1]   = 1'b1;  p[3*i+2][4*i+2]   = 1'b1;   // ~a.b
    end
    return p;
  endfunction

  // OR-plane wordline 2t carries product term t.
  function automatic or_prog_t make_or_prog();
    or_prog_t p;
    for (int o = 0; o < int'(N_OUT); o++) p[o] = '0;
    for (int i = 0; i < int'(W); i++) begin
      p[2*i][2*(3*i)]       = 1'b1;                          // g
      p[2*i+1][2*(3*i+1)]   = 1'b1;                          // p
      p[2*i+1][2*(3*i+2)]   = 1'b1;
    end
    return p;
  endfunction

  localparam and_prog_t AND_PROG = make_and_prog();
  localparam or_prog_t  OR_PROG  = make_or_prog();

  logic [N_IN-1:0]  in_bits;
  logic [N_OUT-1:0] gp;
  logic             cs_unused;

  always_comb begin
    for (int i = 0; i < int'(W); i++) begin
      in_bits[2*i]   = a_sig[i];
      in_bits[2*i+1] = b_sig[i];
    end
  end

  dcim_sop_array #(.N_IN(N_IN), .N_PT(N_PT), .N_OUT(N_OUT)) u_array (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_bits),
    .out_valid, .out_data(gp), .adv,
    .and_prog(AND_PROG), .or_prog(OR_PROG),
    .and_stuck, .or_stuck,
    .peer_slow, .peer_busy,
    .test_start, .test_busy, .test_done, .resilient, .unfixable,
    .cs(cs_unused)
  );

  // carry-in follows the operand through the two array stages
  logic cin_q1, cin_q2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cin_q1 <= 1'b0;
      cin_q2 <= 1'b0;
    end else if (adv) begin
      cin_q1 <= eff_sub;
      cin_q2 <= cin_q1;
    end
  end

  // carry-select adder on g/p
  logic [W-1:0] g, p;
  logic [W:0]   c;
  always_comb begin
    logic c0, c1, bcin;
    for (int i = 0; i < int'(W); i++) begin
      g[i] = gp[2*i];
      p[i] = gp[2*i+1];
    end
    c    = '0;
    bcin = cin_q2;
    for (int blk = 0; blk < int'(W); blk += int'(CSA_BLK)) begin
      c0 = 1'b0;   // ripple inside the block for carry-in 0
      c1 = 1'b1;   // and for carry-in 1
      for (int i = blk; i < blk + int'(CSA_BLK) && i < int'(W); i++) begin
        c[i] = bcin ? c1 : c0;
        c0   = g[i] | (p[i] & c0);
        c1   = g[i] | (p[i] & c1);
      end
      bcin = bcin ? c1 : c0;   // block carry-out selects the next block
    end
    c[W] = bcin;
    sum  = {c[W] & ~cin_q2, p ^ c[W-1:0]};
  end

endmodule
