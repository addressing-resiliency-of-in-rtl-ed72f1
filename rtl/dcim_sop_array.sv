// dcim_sop_array: a Dynamic Computing-In-Memory sum-of-products unit, an AND
// plane feeding an OR plane, with the FTV/FTG two-cycle fault mitigation and
// the FTV test peripherals.
//
// Function: out_data = OR-plane(AND-plane(in_data)). Every input drives a
// true and a complement wordline of the AND plane (in[i] on wordline 2i,
// ~in[i] on 2i+1), every AND bitline (product term) drives a true and a
// complement wordline of the OR plane, as in the paper's XOR example.
// Programs are given per cell (1 = LRS) and are constant in use.
//
// Normal mode (no fault flag set): one operation per cycle. The AND SAs latch
// at the first rising edge after the operand is applied (SE_AND), the OR SAs
// at the next one (SE_OR), so out_data follows in_data by two cycles. The
// paper generates SE_AND and SE_OR from CIM_EN with two flip-flops in series;
// here the same two-step sequence is the pair of latch stages.
//
// Resilient mode (after a test found a faulty bitline in either plane): each
// plane works in two cycles marked by the clock-sequence bit cs. With cs = 0
// only SAs of fault-free bitlines are enabled (~F.~CS); with cs = 1 only SAs
// of faulty bitlines are enabled (F.CS) and flagged wordlines are forced, to
// 1 on the AND plane (FTV) and to 0 on the OR plane (FTG). The OR plane reads
// a copy of the AND latches taken at the end of the AND plane's second cycle,
// so its two cycles see a complete, stable product row while the AND plane
// already works on the next operand; the OR result is held the same way in an
// output latch. These holding latches are this design's choice: the paper
// does not say how the two planes overlap in a pipeline. Throughput
// halves (one operand per two cycles); a result appears three cycles after
// its operand was accepted (two in normal mode), the operand having been
// applied for the two cycles before acceptance.
//
// Handshake: in_valid/in_ready. In resilient mode an operand is accepted at
// the edge ending its cs = 1 cycle, and only if in_valid was already high in
// the cs = 0 cycle before (the operand must stay on the wordlines for both
// cycles). adv is high in the cycles whose closing edge moves an operand one
// stage on; a surrounding pipeline can advance its own registers with it.
// out_valid is high for one cycle when a result appears on out_data, which
// then holds until the next result.
//
// Test: test_start runs the AND-plane tester and then the OR-plane tester
// (ftv_tester); no operand is accepted meanwhile. Flags stay until the next
// test. resilient reports that a fault flag is set, unfixable that a flagged
// wordline is an operand of another faulty bitline.
//
// Lock-step: when several arrays sit in one pipeline they must move together.
// peer_slow (another array is in two-cycle mode) also puts this array on the
// two-cycle schedule, with all its SAs enabled in both cycles, and peer_busy
// (another array is under test) stalls it. Arrays wired this way share cs and
// adv exactly. Tie both to 0 for a stand-alone array.
module dcim_sop_array #(
  parameter int unsigned N_IN  = 32,
  parameter int unsigned N_PT  = 32,
  parameter int unsigned N_OUT = 32
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  output logic                             in_ready,
  input  logic [N_IN-1:0]                  in_data,
  output logic                             out_valid,
  output logic [N_OUT-1:0]                 out_data,
  output logic                             adv,
  input  logic [N_PT-1:0][2*N_IN-1:0]      and_prog,
  input  logic [N_OUT-1:0][2*N_PT-1:0]     or_prog,
  input  logic [N_PT-1:0][2*N_IN-1:0]      and_stuck,
  input  logic [N_OUT-1:0][2*N_PT-1:0]     or_stuck,
  input  logic                             peer_slow,
  input  logic                             peer_busy,
  input  logic                             test_start,
  output logic                             test_busy,
  output logic                             test_done,
  output logic                             resilient,
  output logic                             unfixable,
  output logic                             cs
);

  localparam int unsigned AWL = 2 * N_IN;
  localparam int unsigned OWL = 2 * N_PT;

  // ---------------- wordline drivers ----------------
  logic [AWL-1:0] and_wl_op, and_wl, and_force;
  logic [OWL-1:0] or_wl_op, or_wl, or_force;
  logic [N_PT-1:0] and_bl, and_q, and_hold;
  logic [N_OUT-1:0] or_bl, or_q;

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      and_wl_op[2*i]   = in_data[i];
      and_wl_op[2*i+1] = ~in_data[i];
    end
    for (int p = 0; p < N_PT; p++) begin
      or_wl_op[2*p]   = and_hold[p];
      or_wl_op[2*p+1] = ~and_hold[p];
    end
  end

  // ---------------- testers ----------------
  logic           at_start, at_busy, at_done, at_unfix;
  logic           ot_start, ot_busy, ot_done, ot_unfix;
  logic [AWL-1:0] at_wl, and_fw;
  logic [OWL-1:0] ot_wl, or_fw;
  logic [N_PT-1:0]  and_fb;
  logic [N_OUT-1:0] or_fb;

  assign at_start = test_start && !test_busy;
  assign ot_start = at_done;

  ftv_tester #(.N_WL(AWL), .N_BL(N_PT), .IS_OR(1'b0)) u_and_test (
    .clk, .rst_n, .start(at_start), .cell_prog(and_prog), .bl_val(and_bl),
    .busy(at_busy), .done(at_done), .test_wl(at_wl), .f_bl(and_fb),
    .f_wl(and_fw), .unfixable(at_unfix)
  );

  ftv_tester #(.N_WL(OWL), .N_BL(N_OUT), .IS_OR(1'b1)) u_or_test (
    .clk, .rst_n, .start(ot_start), .cell_prog(or_prog), .bl_val(or_bl),
    .busy(ot_busy), .done(ot_done), .test_wl(ot_wl), .f_bl(or_fb),
    .f_wl(or_fw), .unfixable(ot_unfix)
  );

  assign test_busy = at_busy || ot_busy || at_done;
  assign test_done = ot_done;
  assign resilient = (|and_fb) || (|or_fb);
  assign unfixable = at_unfix || ot_unfix;

  // ---------------- clock sequence and handshake ----------------
  logic valid_prev, slow, stall;
  assign slow  = resilient || peer_slow;
  assign stall = test_busy || peer_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs         <= 1'b0;
      valid_prev <= 1'b0;
    end else begin
      cs         <= (slow && !stall) ? ~cs : 1'b0;
      valid_prev <= in_valid;
    end
  end

  assign adv      = !stall && (!slow || cs);
  assign in_ready = adv && (!slow || valid_prev);

  // ---------------- planes ----------------
  logic [N_PT-1:0]  and_en;
  logic [N_OUT-1:0] or_en;

  always_comb begin
    if (test_busy) begin
      and_wl    = at_wl;
      or_wl     = ot_wl;
      and_force = '0;
      or_force  = '0;
      and_en    = '0;
      or_en     = '0;
    end else if (resilient) begin
      and_wl    = and_wl_op;
      or_wl     = or_wl_op;
      and_force = cs ? and_fw : '0;
      or_force  = cs ? or_fw  : '0;
      and_en    = cs ? and_fb : ~and_fb;
      or_en     = cs ? or_fb  : ~or_fb;
    end else begin
      and_wl    = and_wl_op;
      or_wl     = or_wl_op;
      and_force = '0;
      or_force  = '0;
      and_en    = '1;
      or_en     = '1;
    end
  end

  dcim_and_plane #(.N_WL(AWL), .N_BL(N_PT)) u_and (
    .clk, .rst_n, .wl(and_wl), .force_wl(and_force), .cell_prog(and_prog),
    .stuck_lrs(and_stuck), .sa_en(and_en), .bl_val(and_bl), .sa_q(and_q)
  );

  // Holding latch for the OR-plane wordlines: takes the complete product row
  // at the edge that ends the AND plane's operation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) and_hold <= '0;
    else if (adv) begin
      for (int p = 0; p < N_PT; p++)
        and_hold[p] <= and_en[p] ? and_bl[p] : and_q[p];
    end
  end

  dcim_or_plane #(.N_WL(OWL), .N_BL(N_OUT)) u_or (
    .clk, .rst_n, .wl(or_wl), .force_wl(or_force), .cell_prog(or_prog),
    .stuck_lrs(or_stuck), .sa_en(or_en), .bl_val(or_bl), .sa_q(or_q)
  );

  // Output latch: takes the complete OR row at the edge that ends the OR
  // plane's operation, so the result holds while the fault-free SAs already
  // sense the next operand.
  logic [N_OUT-1:0] or_hold;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) or_hold <= '0;
    else if (adv) begin
      for (int o = 0; o < N_OUT; o++)
        or_hold[o] <= or_en[o] ? or_bl[o] : or_q[o];
    end
  end
  assign out_data = or_hold;

  // ---------------- valid tracking ----------------
  logic v_and, v_or, adv_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_and <= 1'b0;
      v_or  <= 1'b0;
      adv_q <= 1'b0;
    end else begin
      adv_q <= adv;
      if (adv) begin
        v_and <= in_valid && in_ready;
        v_or  <= v_and;
      end
    end
  end
  assign out_valid = v_or && adv_q;

  // Handshake rules: an offered operand stays offered and unchanged until it
  // is accepted (in two-cycle mode the planes sense it in both cycles), and
  // nothing is accepted while the array is being tested.
  a_hold_operand: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_data)));
  a_no_accept_in_test: assert property (@(posedge clk) disable iff (!rst_n)
    !(in_ready && test_busy));
endmodule
