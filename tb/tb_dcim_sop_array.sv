// tb_dcim_sop_array: checks the AND-OR DCIM unit with random sum-of-products
// programs. Operands are streamed with a valid/ready handshake and every
// result is compared with the sum of products evaluated in the testbench.
// Then random stuck-at-LRS defects are put into both planes; while unknown
// they must corrupt some results, after the built-in test they must not. The
// test also checks the one-per-cycle rate and 2-cycle latency in normal mode,
// the same two-cycle schedule and a stall when a peer array asks for them,
// and the one-per-two-cycles rate and 3-cycle latency (from acceptance) in
// FTV/FTG mode, and that an unrepairable pattern is reported.
module tb_dcim_sop_array;
  localparam int NI = 5, NP = 8, NO = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, adv, cs;
  logic [NI-1:0] in_data;
  logic [NO-1:0] out_data;
  logic [NP-1:0][2*NI-1:0] and_prog, and_stuck;
  logic [NO-1:0][2*NP-1:0] or_prog, or_stuck;
  logic test_start, test_busy, test_done, resilient, unfixable;
  logic peer_slow = 0, peer_busy = 0;   // state of a peer array

  dcim_sop_array #(.N_IN(NI), .N_PT(NP), .N_OUT(NO)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, corrupt = 0;
  logic expect_ok = 1;
  int exp_lat = 2, min_gap = 1, last_acc = -10;
  logic [NO-1:0] exp_q[$];
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
      for (int p = 0; p < NP; p++) begin
        if (or_prog[o][2*p]   &&  t[p]) y[o] = 1;
        if (or_prog[o][2*p+1] && !t[p]) y[o] = 1;
      end
    end
    return y;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_q.push_back(ref_sop(in_data));
      acc_q.push_back(cycle);
      checks++;
      if (cycle - last_acc < min_gap) begin failures++; $display("FAIL: rate"); end
      last_acc = cycle;
    end
    if (out_valid) begin
      logic [NO-1:0] e;
      int c0;
      e = exp_q.pop_front();
      c0 = acc_q.pop_front();
      if (expect_ok) begin
        checks += 2;
        if (out_data != e) begin failures++; $display("FAIL: out %b exp %b", out_data, e); end
        if (cycle - c0 != exp_lat) begin failures++; $display("FAIL: latency %0d", cycle - c0); end
      end else if (out_data != e) corrupt++;
    end
  end

  task automatic stream(int n);
    int sent = 0;
    in_data = NI'($urandom);
    in_valid = 1;
    while (sent < n) begin
      @(posedge clk);
      if (in_ready) begin
        sent++;
        #1 in_data = NI'($urandom);
      end
    end
    #1 in_valid = 0;
    repeat (6) @(posedge clk);
  endtask

  task automatic run_test();
    @(negedge clk) test_start = 1;
    @(negedge clk) test_start = 0;
    while (!test_done) @(negedge clk);
  endtask

  function automatic logic model_unfixable();
    logic [2*NI-1:0] fa = '0;
    logic [2*NP-1:0] fo = '0;
    logic u = 0;
    for (int p = 0; p < NP; p++) fa |= and_stuck[p] & ~and_prog[p];
    for (int o = 0; o < NO; o++) fo |= or_stuck[o] & ~or_prog[o];
    for (int p = 0; p < NP; p++) if ((and_stuck[p] & ~and_prog[p]) != 0 && (and_prog[p] & fa) != 0) u = 1;
    for (int o = 0; o < NO; o++) if ((or_stuck[o] & ~or_prog[o]) != 0 && (or_prog[o] & fo) != 0) u = 1;
    return u;
  endfunction

  initial begin
    in_valid = 0; in_data = '0; test_start = 0;
    and_stuck = '0; or_stuck = '0;
    for (int p = 0; p < NP; p++) begin
      and_prog[p] = '0;
      for (int i = 0; i < NI; i++)
        case ($urandom_range(0, 2))
          1: and_prog[p][2*i] = 1;
          2: and_prog[p][2*i+1] = 1;
          default: ;
        endcase
    end
    for (int o = 0; o < NO; o++) begin
      or_prog[o] = '0;
      for (int p = 0; p < NP; p++) if ($urandom_range(0, 2) == 0) or_prog[o][2*p] = 1;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    stream(200);

    // lock-step with a peer array: a peer in two-cycle mode slows this healthy
    // array to one operand per two cycles; a peer under test stalls it
    peer_slow = 1;
    exp_lat = 3;
    min_gap = 2;
    stream(60);
    peer_slow = 0;
    exp_lat = 2;
    min_gap = 1;
    @(negedge clk) peer_busy = 1;
    in_valid = 1;
    repeat (5) begin
      @(posedge clk);
      checks++;
      if (in_ready || adv) begin failures++; $display("FAIL: peer_busy did not stall"); end
    end
    @(negedge clk) peer_busy = 0;
    do @(posedge clk); while (!in_ready);   // the waiting operand goes in
    #1 in_valid = 0;
    repeat (4) @(posedge clk);

    // unrepairable: bitline 0 and 1 each get a defect on an operand of the other
    begin
      int w0 = -1, w1 = -1;
      for (int w = 0; w < 2*NI; w++) begin
        if (and_prog[0][w] && !and_prog[1][w]) w0 = w;
        if (and_prog[1][w] && !and_prog[0][w]) w1 = w;
      end
      if (w0 >= 0 && w1 >= 0) begin
        and_stuck[1][w0] = 1; and_stuck[0][w1] = 1;
        run_test();
        checks++;
        if (!unfixable) begin failures++; $display("FAIL: unfixable not reported"); end
      end
    end

    // repairable random defects
    do begin
      and_stuck = '0; or_stuck = '0;
      repeat (3) and_stuck[$urandom_range(0, NP-1)][$urandom_range(0, 2*NI-1)] = 1;
      repeat (2) or_stuck[$urandom_range(0, NO-1)][$urandom_range(0, 2*NP-1)] = 1;
    end while (model_unfixable() || ((and_stuck[0] & ~and_prog[0]) == 0));
    // clear the flags with a test of a clean array, then apply the defects
    // without testing: results must go wrong
    begin
      logic [NP-1:0][2*NI-1:0] keep_a;
      logic [NO-1:0][2*NP-1:0] keep_o;
      keep_a = and_stuck; keep_o = or_stuck;
      and_stuck = '0; or_stuck = '0;
      run_test();
      and_stuck = keep_a; or_stuck = keep_o;
    end
    expect_ok = 0;
    stream(100);
    expect_ok = 1;
    checks++;
    if (corrupt == 0) begin failures++; $display("FAIL: defects never showed"); end

    run_test();
    checks += 2;
    if (!resilient) begin failures++; $display("FAIL: not resilient"); end
    if (unfixable)  begin failures++; $display("FAIL: spurious unfixable"); end
    exp_lat = 3;
    min_gap = 2;
    stream(200);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
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
