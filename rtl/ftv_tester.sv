// ftv_tester: finds stuck-at-LRS cells of one DCIM plane with the FTV
// wordline peripherals and sets the fault flags FTV/FTG use.
//
// The procedure follows the paper's brute-force test. Bitlines are tested
// one at a time: the wordlines of the cells programmed LRS on that bitline
// are driven to the non-controlling value and all others to the controlling
// value, so a healthy bitline senses the non-controlling value and a bitline
// with an extra LRS cell does not. On a faulty bitline every HRS-programmed
// cell is then tested alone: its wordline gets the controlling value and all
// others the non-controlling one; if the SA follows, that cell is stuck LRS
// and its wordline flag f_wl is set. A cell programmed LRS cannot be hurt by a
// stuck-at-LRS defect and is not flagged. For the AND plane (IS_OR = 0) the
// controlling value is 0; for the OR plane (IS_OR = 1) it is 1, which is this
// design's reading of "the rest of the FTG's operation are the same as FTV".
//
// The paper gives the two SA readings in opposite senses ("faulty ('1')" in
// the bitline step, "If SA output is '0', the RRAM-under-test is deemed
// faulty" in the cell step); with the AND polarity used by dcim_and_plane only
// the second reading is consistent, and both steps here decide by comparing
// with the value a healthy bitline gives.
//
// After the test, unfixable is set when some faulty bitline has one of its
// own LRS-programmed cells on a flagged wordline: FTV would force that
// operand in the second cycle and lose its logic (the paper's non-fixable
// case of Fig. 11).
//
// Timing: one cycle per bitline, plus one cycle per wordline for each faulty
// bitline. start (one cycle) clears the flags and begins; busy is high while
// testing, and done pulses for one cycle at the end. While busy the tester
// owns the plane's wordlines through test_wl; the plane senses
// combinationally and bl_val is read in the same cycle.
module ftv_tester #(
  parameter int unsigned N_WL  = 64,
  parameter int unsigned N_BL  = 32,
  parameter bit          IS_OR = 1'b0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [N_BL-1:0][N_WL-1:0]  cell_prog,
  input  logic [N_BL-1:0]            bl_val,
  output logic                       busy,
  output logic                       done,
  output logic [N_WL-1:0]            test_wl,
  output logic [N_BL-1:0]            f_bl,
  output logic [N_WL-1:0]            f_wl,
  output logic                       unfixable
);

  localparam int unsigned BLW = (N_BL > 1) ? $clog2(N_BL) : 1;
  localparam int unsigned WLW = (N_WL > 1) ? $clog2(N_WL) : 1;

  typedef enum logic [1:0] {T_IDLE, T_BL, T_CELL} tstate_e;
  tstate_e        state;
  logic [BLW-1:0] bl_idx;
  logic [WLW-1:0] wl_idx;

  logic           sensed;       // value the bitline under test resolves
  logic           mismatch;     // differs from a healthy bitline
  logic [N_WL-1:0] onehot;

  assign onehot = N_WL'(1) << wl_idx;
  assign sensed = bl_val[bl_idx];
  // healthy readings: AND plane 1, OR plane 0, in both steps
  assign mismatch = IS_OR ? sensed : ~sensed;

  always_comb begin
    test_wl = '0;
    unique case (state)
      T_BL:    test_wl = IS_OR ? ~cell_prog[bl_idx] : cell_prog[bl_idx];
      T_CELL:  test_wl = IS_OR ? onehot : ~onehot;
      default: test_wl = '0;
    endcase
  end

  assign busy = (state != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= T_IDLE;
      bl_idx <= '0;
      wl_idx <= '0;
      f_bl   <= '0;
      f_wl   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          state  <= T_BL;
          bl_idx <= '0;
          wl_idx <= '0;
          f_bl   <= '0;
          f_wl   <= '0;
        end
        T_BL: begin
          if (mismatch) begin
            f_bl[bl_idx] <= 1'b1;
            wl_idx       <= '0;
            state        <= T_CELL;
          end else if (bl_idx == BLW'(N_BL-1)) begin
            state <= T_IDLE;
            done  <= 1'b1;
          end else begin
            bl_idx <= bl_idx + 1'b1;
          end
        end
        T_CELL: begin
          if (mismatch && !cell_prog[bl_idx][wl_idx]) f_wl[wl_idx] <= 1'b1;
          if (wl_idx == WLW'(N_WL-1)) begin
            if (bl_idx == BLW'(N_BL-1)) begin
              state <= T_IDLE;
              done  <= 1'b1;
            end else begin
              bl_idx <= bl_idx + 1'b1;
              state  <= T_BL;
            end
          end else begin
            wl_idx <= wl_idx + 1'b1;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  always_comb begin
    unfixable = 1'b0;
    for (int b = 0; b < N_BL; b++)
      if (f_bl[b] && |(cell_prog[b] & f_wl)) unfixable = 1'b1;
  end

endmodule
