// dcim_or_plane: the OR (NOR) plane of a Dynamic Computing-In-Memory RRAM
// crossbar, with Force-To-Ground (FTG) input forcing and one sense amplifier
// with latch per bitline.
//
// Each bitline is charged through every LRS cell whose wordline is high, so
// the SA reads the OR of the wordlines whose cells are LRS. A stuck-at-LRS
// defect adds an unwanted term to its bitline. FTG masks it by forcing the
// input of the faulty cell to 0 in the second cycle, since extra zeros do not
// change an OR. The paper states FTG two ways, "the faulty BLs are forced to
// 0V" and "FTG forces inputs of faulty RRAMs to the ground"; this plane
// follows the second, which mirrors FTV on the AND plane.
//
// Interface and timing are those of dcim_and_plane: force_wl[w] forces
// wordline w to 0, sa_en[b] latches bl_val[b] into sa_q[b] at the rising
// edge (the paper's SE_OR edge). Analog behaviour is not modelled.
module dcim_or_plane #(
  parameter int unsigned N_WL = 64,
  parameter int unsigned N_BL = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [N_WL-1:0]                wl,
  input  logic [N_WL-1:0]                force_wl,
  input  logic [N_BL-1:0][N_WL-1:0]      cell_prog,
  input  logic [N_BL-1:0][N_WL-1:0]      stuck_lrs,
  input  logic [N_BL-1:0]                sa_en,
  output logic [N_BL-1:0]                bl_val,
  output logic [N_BL-1:0]                sa_q
);

  logic [N_WL-1:0] wl_eff;
  assign wl_eff = wl & ~force_wl;

  always_comb begin
    for (int b = 0; b < N_BL; b++)
      bl_val[b] = |((cell_prog[b] | stuck_lrs[b]) & wl_eff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sa_q <= '0;
    else
      for (int b = 0; b < N_BL; b++)
        if (sa_en[b]) sa_q[b] <= bl_val[b];
  end

endmodule
