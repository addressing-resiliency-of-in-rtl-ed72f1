// tb_ftv_tester: checks the brute-force FTV test on an AND plane and on an OR
// plane (both dcim plane modules as the device under test's array).
// For random programs and random stuck-at-LRS defects the flags must match
// what the defect map implies: a bitline is faulty when it has a defect on an
// HRS-programmed cell; a wordline is flagged when such a defect sits on it.
// The number of test cycles must be N_BL + N_WL per faulty bitline, and
// unfixable must be set exactly when a faulty bitline has one of its own
// operands on a flagged wordline.
module tb_ftv_tester;
  localparam int NW = 10, NB = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NB-1:0][NW-1:0] prog, stuck;
  logic start;
  // AND side
  logic [NW-1:0] a_wl;
  logic [NB-1:0] a_bl, a_q, a_fb;
  logic [NW-1:0] a_fw;
  logic a_busy, a_done, a_unf;
  // OR side
  logic [NW-1:0] o_wl;
  logic [NB-1:0] o_bl, o_q, o_fb;
  logic [NW-1:0] o_fw;
  logic o_busy, o_done, o_unf;

  dcim_and_plane #(.N_WL(NW), .N_BL(NB)) u_ap (.clk, .rst_n, .wl(a_wl), .force_wl('0),
    .cell_prog(prog), .stuck_lrs(stuck), .sa_en('0), .bl_val(a_bl), .sa_q(a_q));
  ftv_tester #(.N_WL(NW), .N_BL(NB), .IS_OR(1'b0)) dut_a (.clk, .rst_n, .start,
    .cell_prog(prog), .bl_val(a_bl), .busy(a_busy), .done(a_done), .test_wl(a_wl),
    .f_bl(a_fb), .f_wl(a_fw), .unfixable(a_unf));
  dcim_or_plane #(.N_WL(NW), .N_BL(NB)) u_op (.clk, .rst_n, .wl(o_wl), .force_wl('0),
    .cell_prog(prog), .stuck_lrs(stuck), .sa_en('0), .bl_val(o_bl), .sa_q(o_q));
  ftv_tester #(.N_WL(NW), .N_BL(NB), .IS_OR(1'b1)) dut_o (.clk, .rst_n, .start,
    .cell_prog(prog), .bl_val(o_bl), .busy(o_busy), .done(o_done), .test_wl(o_wl),
    .f_bl(o_fb), .f_wl(o_fw), .unfixable(o_unf));

  int a_cycles, o_cycles;
  always @(posedge clk) begin
    if (a_busy) a_cycles++;
    if (o_busy) o_cycles++;
  end

  initial begin
    logic [NB-1:0] efb;
    logic [NW-1:0] efw;
    logic eunf;
    int nf;
    start = 0; prog = '0; stuck = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (60) begin
      for (int b = 0; b < NB; b++) begin
        prog[b]  = NW'($urandom) & NW'($urandom);
        stuck[b] = '0;
        if ($urandom_range(0, 2) == 0) stuck[b][$urandom_range(0, NW-1)] = 1'b1;
      end
      efb = '0; efw = '0; eunf = 0; nf = 0;
      for (int b = 0; b < NB; b++)
        for (int w = 0; w < NW; w++)
          if (stuck[b][w] && !prog[b][w]) begin efb[b] = 1; efw[w] = 1; end
      for (int b = 0; b < NB; b++) begin
        if (efb[b]) nf++;
        if (efb[b] && (prog[b] & efw) != 0) eunf = 1;
      end
      a_cycles = 0; o_cycles = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (a_busy || o_busy) @(negedge clk);
      checks += 8;
      if (a_fb != efb) begin failures++; $display("FAIL: AND f_bl %b exp %b", a_fb, efb); end
      if (a_fw != efw) begin failures++; $display("FAIL: AND f_wl %b exp %b", a_fw, efw); end
      if (o_fb != efb) begin failures++; $display("FAIL: OR f_bl %b exp %b", o_fb, efb); end
      if (o_fw != efw) begin failures++; $display("FAIL: OR f_wl %b exp %b", o_fw, efw); end
      if (a_unf != eunf) begin failures++; $display("FAIL: AND unfixable"); end
      if (o_unf != eunf) begin failures++; $display("FAIL: OR unfixable"); end
      if (a_cycles != NB + nf*NW) begin failures++; $display("FAIL: AND cycles %0d exp %0d", a_cycles, NB + nf*NW); end
      if (o_cycles != NB + nf*NW) begin failures++; $display("FAIL: OR cycles %0d exp %0d", o_cycles, NB + nf*NW); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
