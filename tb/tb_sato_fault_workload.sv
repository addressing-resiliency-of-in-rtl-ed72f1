// tb_sato_fault_workload: the SATO evaluation workload, 11 stuck-at-LRS
// cells (a 99.5% cell yield) placed at random in the full-size SATO array
// (16 sets of 3 bitlines over 64 wordlines; all defaults), each set
// programmed with the three adder product terms of its 2-input slice.
// For each trial the sets holding a harmful defect (one on an HRS-programmed
// cell) are flagged, the array's unfixable output is compared with the rule
// "two flagged sets are adjacent", and operands are streamed in SATO mode at
// one operand per two cycles, results one cycle after acceptance. Slice j is
// repaired unless set j and the set after it are both faulty: every repaired
// slice and every healthy slice must be right. At this defect density almost
// every distribution has some adjacent pair, so the whole-array repair rate
// is near zero; the testbench prints it and the share of faulty sets that
// were repaired, the figure to hold against the "about half" reported for
// SATO.
module tb_sato_fault_workload;
  localparam int NS = 16, K = 2, B = 3, NF = 11, TRIALS = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, sato_on, unfixable;
  logic [NS-1:0][K-1:0] in_data;
  logic [NS-1:0][B-1:0] out_data;
  logic [NS*B-1:0][NS*2*K-1:0] cell_prog, stuck_lrs;
  logic [NS-1:0] f_set;

  sato_array dut (.*);

  int checks = 0, failures = 0, cycle = 0, last_acc = -10, n_fixable = 0, n_results = 0;
  int n_faulty_sets = 0, n_sets_ok = 0;
  logic [NS-1:0][B-1:0] exp_q[$];
  logic [NS-1:0][B-1:0] ok_mask;   // slices whose result must be right
  int acc_q[$];
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      logic [NS-1:0][B-1:0] e;
      for (int s = 0; s < NS; s++) begin
        e[s][0] =  in_data[s][0] &  in_data[s][1];
        e[s][1] =  in_data[s][0] & ~in_data[s][1];
        e[s][2] = ~in_data[s][0] &  in_data[s][1];
      end
      exp_q.push_back(e);
      acc_q.push_back(cycle);
      checks++;
      if (sato_on && cycle - last_acc < 2) begin failures++; $display("FAIL: rate"); end
      last_acc = cycle;
    end
    if (out_valid) begin
      logic [NS-1:0][B-1:0] e;
      int c0;
      e = exp_q.pop_front();
      c0 = acc_q.pop_front();
      checks += 2;
      n_results++;
      if ((out_data & ok_mask) != (e & ok_mask)) begin failures++; $display("FAIL: out %h exp %h", out_data, e); end
      if (cycle - c0 != 1) begin failures++; $display("FAIL: latency %0d", cycle - c0); end
    end
  end

  task automatic stream(int n);
    int sent = 0;
    in_data = $urandom;
    in_valid = 1;
    while (sent < n) begin
      @(posedge clk);
      if (in_ready) begin
        sent++;
        #1 in_data = $urandom;
      end
    end
    #1 in_valid = 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = '0; stuck_lrs = '0; ok_mask = '1; f_set = '0; cell_prog = '0;
    for (int s = 0; s < NS; s++) begin
      int wa, wb;
      wa = (s*K)*2;
      wb = (s*K + 1)*2;
      cell_prog[s*B][wa] = 1;     cell_prog[s*B][wb] = 1;
      cell_prog[s*B+1][wa] = 1;   cell_prog[s*B+1][wb+1] = 1;
      cell_prog[s*B+2][wa+1] = 1; cell_prog[s*B+2][wb] = 1;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < TRIALS; t++) begin
      int placed;
      logic adj;
      stuck_lrs = '0;
      placed = 0;
      while (placed < NF) begin
        int b, w;
        b = $urandom_range(0, NS*B-1);
        w = $urandom_range(0, NS*2*K-1);
        if (!stuck_lrs[b][w]) begin stuck_lrs[b][w] = 1; placed++; end
      end
      for (int s = 0; s < NS; s++) begin
        f_set[s] = 0;
        for (int j = 0; j < B; j++) if ((stuck_lrs[s*B+j] & ~cell_prog[s*B+j]) != 0) f_set[s] = 1;
      end
      adj = 0;
      for (int s = 0; s < NS; s++) if (f_set[s] && f_set[(s+1) % NS]) adj = 1;
      for (int s = 0; s < NS; s++) begin
        ok_mask[s] = (f_set[s] && f_set[(s+1) % NS]) ? '0 : '1;
        if (f_set[s]) begin
          n_faulty_sets++;
          if (!f_set[(s+1) % NS]) n_sets_ok++;
        end
      end
      #1;
      checks += 2;
      if (unfixable != adj) begin failures++; $display("FAIL: trial %0d unfixable %b model %b", t, unfixable, adj); end
      if (sato_on != (f_set != 0)) begin failures++; $display("FAIL: sato_on"); end
      if (!adj) n_fixable++;
      stream(10);
    end
    $display("SATO workload: %0d of %0d distributions of %0d faults repairable; %0d of %0d faulty sets repaired",
             n_fixable, TRIALS, NF, n_sets_ok, n_faulty_sets);
    checks += 2;
    if (n_sets_ok == 0 || n_results == 0) begin failures++; $display("FAIL: no set repaired"); end
    if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
