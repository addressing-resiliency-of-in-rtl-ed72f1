// dcim_and_plane: the AND (NAND) plane of a Dynamic Computing-In-Memory
// RRAM crossbar, with Force-To-VDD (FTV) wordline forcing and one sense
// amplifier (SA) with latch per bitline.
//
// Each bitline is precharged and then discharged through every cell that is
// in the low resistance state (LRS) and whose wordline is low, so the SA reads
// the AND of the wordlines whose cells are LRS. Cells in the high resistance
// state (HRS) do not take part. A cell's effective state is its programmed
// state OR a stuck-at-LRS defect (the paper's stuck-at-1 / HRS-to-LRS
// retention failure): a defective cell adds an unwanted input to its bitline.
// FTV masks such a cell by forcing its wordline to 1 (VDD) in the second
// cycle, so an A.B.C term whose C cell is faulty becomes A.B.1.
//
// The analog bitline, the reference voltage and the sense margin are not
// modelled: the plane computes the logical value the SA resolves. In a
// NAND-NAND implementation the SA output is inverted; here the logical AND
// polarity is used throughout, as in the paper's XOR example.
//
// Interface: wl[w] is the logical value driven on wordline w (the caller
// supplies true and complement lines); force_wl[w] forces it to 1;
// cell_prog[b][w] = 1 programs cell (b,w) to LRS; stuck_lrs[b][w] = 1 marks
// a defect. bl_val is the value each SA resolves in the current cycle;
// sa_en[b] latches it into sa_q[b] at the rising clock edge, which plays the
// role of the paper's SE_AND edge. Reset clears the latches (not mentioned in
// the paper).
module dcim_and_plane #(
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
  assign wl_eff = wl | force_wl;

  // A bitline stays high only if no LRS cell sits on a low wordline.
  always_comb begin
    for (int b = 0; b < N_BL; b++)
      bl_val[b] = &(~(cell_prog[b] | stuck_lrs[b]) | wl_eff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sa_q <= '0;
    else
      for (int b = 0; b < N_BL; b++)
        if (sa_en[b]) sa_q[b] <= bl_val[b];
  end

endmodule
