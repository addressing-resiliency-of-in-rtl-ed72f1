// tb_ftv_fault_workload: the FTV evaluation workload, 30 stuck-at-LRS cells
// placed at random in the 64-wordline x 32-bitline AND plane of a full-size
// dcim_sop_array (32 inputs, 32 product terms, 32 outputs; all defaults).
// Each trial draws a random program of two-literal product terms, like the
// terms of an adder bit (output o of the OR plane passes product term o, so
// every term is visible), and 30 distinct defect positions, runs the
// built-in test, and checks that resilient/unfixable match a model of the
// repair rule. Operands are then streamed in FTV mode, one per two cycles
// with results three cycles after acceptance. A faulty bitline is repaired
// unless one of its own operands sits on a flagged wordline: every healthy
// and every repaired term must be right. The testbench prints the share of
// faulty bitlines repaired and of whole distributions repairable; it checks
// the repair rule, not the rates.
module tb_ftv_fault_workload;
  localparam int NI = 32, NP = 32, NO = 32, NF = 30, TRIALS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, adv, cs;
  logic [NI-1:0] in_data;
  logic [NO-1:0] out_data;
  logic [NP-1:0][2*NI-1:0] and_prog, and_stuck;
  logic [NO-1:0][2*NP-1:0] or_prog, or_stuck;
  logic test_start, test_busy, test_done, resilient, unfixable;
  logic peer_slow = 0, peer_busy = 0;   // stand-alone array

  dcim_sop_array dut (.*);

  int checks = 0, failures = 0, cycle = 0, last_acc = -10, n_fixable = 0, n_results = 0;
  logic [NO-1:0] exp_q[$];
  logic [NO-1:0] ok_mask;   // terms whose result must be right
  int n_faulty_bl = 0, n_bl_ok = 0;
  int acc_q[$];
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [NO-1:0] ref_sop(logic [NI-1:0] x);
    logic [NP-1:0] t;
    logic [NO-1:0] y;
    for (int p = 0; p < NP; p++) begin
      t[p] = 1;
      for (int i = 0; i < NI; i++) begin
        if (and_prog[p][2*i]   && !x[i]) t[p] = 0;
        if (and_prog[p][2*i+1] &&  x[i]) t[p] = 0;
      end
    end
    for (int o = 0; o < NO; o++) begin
      y[o] = 0;
      for (int p = 0; p < NP; p++) if (or_prog[o][2*p] && t[p]) y[o] = 1;
    end
    return y;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_q.push_back(ref_sop(in_data));
      acc_q.push_back(cycle);
      checks++;
      if (cycle - last_acc < 2) begin failures++; $display("FAIL: rate"); end
      last_acc = cycle;
    end
    if (out_valid) begin
      logic [NO-1:0] e;
      int c0;
      e = exp_q.pop_front();
      c0 = acc_q.pop_front();
      checks += 2;
      n_results++;
      if ((out_data & ok_mask) != (e & ok_mask)) begin failures++; $display("FAIL: out %h exp %h", out_data, e); end
      if (cycle - c0 != 3) begin failures++; $display("FAIL: latency %0d", cycle - c0); end
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
    repeat (6) @(posedge clk);
  endtask

  // repair rule: a faulty bitline whose own operand sits on a flagged wordline
  function automatic logic model_unfixable();
    logic [2*NI-1:0] fa = '0;
    logic u = 0;
    for (int p = 0; p < NP; p++) fa |= and_stuck[p] & ~and_prog[p];
    for (int p = 0; p < NP; p++) if ((and_stuck[p] & ~and_prog[p]) != 0 && (and_prog[p] & fa) != 0) u = 1;
    return u;
  endfunction

  initial begin
    in_valid = 0; in_data = '0; test_start = 0;
    and_stuck = '0; or_stuck = '0; and_prog = '0; or_prog = '0; ok_mask = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < TRIALS; t++) begin
      logic mu;
      int placed;
      and_prog = '0; or_prog = '0; and_stuck = '0;
      for (int p = 0; p < NP; p++) begin
        int i, j;
        i = $urandom_range(0, NI-1);
        j = (i + $urandom_range(1, NI-1)) % NI;
        and_prog[p][2*i + $urandom_range(0, 1)] = 1;
        and_prog[p][2*j + $urandom_range(0, 1)] = 1;
      end
      for (int o = 0; o < NO; o++) or_prog[o][2*o] = 1;
      placed = 0;
      while (placed < NF) begin
        int p, w;
        p = $urandom_range(0, NP-1);
        w = $urandom_range(0, 2*NI-1);
        if (!and_stuck[p][w]) begin and_stuck[p][w] = 1; placed++; end
      end
      mu = model_unfixable();
      begin
        logic [2*NI-1:0] fa;
        fa = '0;
        for (int p = 0; p < NP; p++) fa |= and_stuck[p] & ~and_prog[p];
        for (int p = 0; p < NP; p++) begin
          ok_mask[p] = ((and_stuck[p] & ~and_prog[p]) == 0) || ((and_prog[p] & fa) == 0);
          if ((and_stuck[p] & ~and_prog[p]) != 0) begin
            n_faulty_bl++;
            if (ok_mask[p]) n_bl_ok++;
          end
        end
      end
      @(negedge clk) test_start = 1;
      @(negedge clk) test_start = 0;
      while (!test_done) @(negedge clk);
      checks += 2;
      if (!resilient) begin failures++; $display("FAIL: trial %0d not resilient", t); end
      if (unfixable != mu) begin failures++; $display("FAIL: trial %0d unfixable %b model %b", t, unfixable, mu); end
      if (!mu) n_fixable++;
      stream(30);
    end
    $display("FTV workload: %0d of %0d faulty bitlines repaired; %0d of %0d distributions of %0d faults wholly repairable",
             n_bl_ok, n_faulty_bl, n_fixable, TRIALS, NF);
    checks += 2;
    if (n_bl_ok == 0 || n_results == 0) begin failures++; $display("FAIL: no bitline repaired"); end
    if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
