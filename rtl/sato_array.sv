// sato_array: a bit-sliced DCIM AND plane protected by Shift-At-The-Output
// (SATO).
//
// The plane is divided into N_SET identical sets. Set s owns the K inputs of
// slice s (2K wordlines, true and complement) and B bitlines that compute the
// same B product terms for every slice, e.g. B = 3 for the a.b, a.~b and
// ~a.b terms of an adder bit. SATO assumes the program is the same for every
// set; it never uses a faulty set.
//
// With no faulty set flagged, one operation takes one cycle: the SAs latch
// at the edge ending the cycle in which the operand is applied. With faulty
// sets flagged in f_set, an operation takes two cycles (clock sequence cs):
//   cycle 1 (cs = 0): every set computes its own slice; the SA latch row is
//     loaded shifted by one set, so the result of set s is held by set s+1
//     (the paper's "three shifts" of the SA latches for B = 3, done here in
//     the same edge);
//   cycle 2 (cs = 1): the wordline multiplexers give set s the inputs of
//     slice s-1, and only the sets s whose neighbour s-1 is faulty enable
//     their SAs, recomputing slice s-1 on fault-free bitlines.
// Set indices wrap around, as the multiplexer of the first wordline in the
// paper's figure takes the last input. The output of slice j is then read from
// the latches of set j+1. A faulty set whose next set is also faulty cannot be
// repaired; unfixable reports it (the paper's "two consecutive sets of BLs").
//
// The paper gives no SATO test procedure ("Test circuitry: Needed"), so the
// faulty-set flags are inputs.
//
// Handshake as in dcim_sop_array: in_valid/in_ready, with the operand held
// for both cycles in SATO mode; out_valid pulses for one cycle with the
// result on out_data one cycle after acceptance; in SATO mode the operand
// has then been on the wordlines for the two cycles before acceptance.
module sato_array #(
  parameter int unsigned N_SET = 16,
  parameter int unsigned K     = 2,
  parameter int unsigned B     = 3
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic [N_SET-1:0][K-1:0]                in_data,
  output logic                                   out_valid,
  output logic [N_SET-1:0][B-1:0]                out_data,
  input  logic [N_SET*B-1:0][N_SET*2*K-1:0]      cell_prog,
  input  logic [N_SET*B-1:0][N_SET*2*K-1:0]      stuck_lrs,
  input  logic [N_SET-1:0]                       f_set,
  output logic                                   sato_on,
  output logic                                   unfixable
);

  localparam int unsigned N_WL = N_SET * 2 * K;
  localparam int unsigned N_BL = N_SET * B;

  logic cs, valid_prev;
  assign sato_on = |f_set;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs         <= 1'b0;
      valid_prev <= 1'b0;
    end else begin
      cs         <= sato_on ? ~cs : 1'b0;
      valid_prev <= in_valid;
    end
  end

  assign in_ready = !sato_on || (cs && valid_prev);

  // faulty set s is repaired by set s+1, which must itself be fault-free
  always_comb begin
    unfixable = 1'b0;
    for (int s = 0; s < N_SET; s++)
      if (f_set[s] && f_set[(s + 1) % N_SET]) unfixable = 1'b1;
  end

  // wordline input-shift multiplexers
  logic [N_SET-1:0][K-1:0] slice_in;
  logic [N_WL-1:0]         wl;
  always_comb begin
    for (int s = 0; s < N_SET; s++) begin
      slice_in[s] = (sato_on && cs) ? in_data[(s + N_SET - 1) % N_SET] : in_data[s];
      for (int k = 0; k < K; k++) begin
        wl[(s*K + k)*2]     = slice_in[s][k];
        wl[(s*K + k)*2 + 1] = ~slice_in[s][k];
      end
    end
  end

  logic [N_BL-1:0] bl_val, plane_q, latch;
  logic [N_BL-1:0] sa_en;

  // The plane's own latch is not used: SATO writes the latch row shifted.
  dcim_and_plane #(.N_WL(N_WL), .N_BL(N_BL)) u_plane (
    .clk, .rst_n, .wl, .force_wl('0), .cell_prog, .stuck_lrs,
    .sa_en('0), .bl_val, .sa_q(plane_q)
  );

  // SA enables of the second cycle: set s senses when set s-1 is faulty.
  always_comb begin
    for (int s = 0; s < N_SET; s++)
      for (int j = 0; j < B; j++)
        sa_en[s*B + j] = f_set[(s + N_SET - 1) % N_SET];
  end

  logic accept;
  assign accept = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) latch <= '0;
    else if (!sato_on) begin
      latch <= bl_val;
    end else if (!cs) begin
      // compute every slice, then shift the latch row up by one set
      for (int s = 0; s < N_SET; s++)
        for (int j = 0; j < B; j++)
          latch[((s + 1) % N_SET)*B + j] <= bl_val[s*B + j];
    end else begin
      for (int i = 0; i < N_BL; i++)
        if (sa_en[i]) latch[i] <= bl_val[i];
    end
  end

  always_comb begin
    for (int s = 0; s < N_SET; s++)
      for (int j = 0; j < B; j++)
        out_data[s][j] = sato_on ? latch[((s + 1) % N_SET)*B + j] : latch[s*B + j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= accept;
  end

  // Handshake rule: an offered operand stays offered and unchanged until it
  // is accepted (in SATO mode the array senses it in both cycles).
  a_hold_operand: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_data)));
endmodule
