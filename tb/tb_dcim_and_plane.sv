// tb_dcim_and_plane: checks the AND plane against a cell-by-cell model.
// Random programs, stuck-at-LRS defects, wordline values and FTV forcing are
// applied; the sensed value of every bitline must equal the AND of the
// effective wordline values of its LRS cells, and a latch must load only
// when its sense enable is high.
module tb_dcim_and_plane;
  localparam int NW = 12, NB = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NW-1:0] wl, force_wl;
  logic [NB-1:0][NW-1:0] cell_prog, stuck_lrs;
  logic [NB-1:0] sa_en, bl_val, sa_q, q_model;
  int checks = 0, failures = 0;

  dcim_and_plane #(.N_WL(NW), .N_BL(NB)) dut (.*);

  function automatic logic model_bl(int b);
    for (int w = 0; w < NW; w++) begin
      if (cell_prog[b][w] == 1'b0 && stuck_lrs[b][w] == 1'b0) continue;  // HRS: no path
      if (wl[w] == 1'b0 && force_wl[w] == 1'b0) return 1'b0;             // discharged
    end
    return 1'b1;
  endfunction

  initial begin
    wl = '0; force_wl = '0; cell_prog = '0; stuck_lrs = '0; sa_en = '0;
    q_model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (500) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        cell_prog[b] = NW'($urandom) & NW'($urandom);
        stuck_lrs[b] = ($urandom_range(0, 3) == 0) ? NW'(1) << $urandom_range(0, NW-1) : '0;
      end
      wl = NW'($urandom) | NW'($urandom);
      force_wl = ($urandom_range(0, 1) == 1) ? NW'($urandom) & NW'($urandom) : '0;
      sa_en = NB'($urandom);
      #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (bl_val[b] != model_bl(b)) begin
          failures++;
          $display("FAIL: bl %0d = %b expected %b", b, bl_val[b], model_bl(b));
        end
        if (sa_en[b]) q_model[b] = model_bl(b);
      end
      @(posedge clk); #1;
      checks++;
      if (sa_q != q_model) begin failures++; $display("FAIL: latch %b expected %b", sa_q, q_model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
