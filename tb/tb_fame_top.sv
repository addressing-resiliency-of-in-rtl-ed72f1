// tb_fame_top: end-to-end test of the whole design at its default sizes.
//
// Floating-point part: streams random and edge-case additions and
// subtractions through the adder and compares them with an exact reference.
// It then injects stuck-at-LRS cells into both planes of the fraction array
// and into the two exponent arrays and shows that results go wrong while the
// faults are unknown, runs the FTV test (the pipeline stalls meanwhile), and
// streams again in the two-cycle FTV/FTG mode, where every result must be
// right again. A pattern FTV cannot repair must be reported as unfixable.
// SATO part: programs the SATO array with the three adder product terms in
// every set, checks it fault-free, then with defects in non-adjacent sets
// flagged (two-cycle SATO mode), and checks that adjacent faulty sets are
// reported as unfixable.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_fame_top;
  import fame_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int W  = SIG_W;
  localparam int NS = 16, K = 2, B = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fp_in_valid, fp_in_ready, fp_sub, fp_out_valid;
  fp32_t fp_a, fp_b, fp_result;
  fp_flags_t fp_flags;
  logic [3*W-1:0][4*W-1:0] fp_and_stuck;
  logic [2*W-1:0][6*W-1:0] fp_or_stuck;
  logic [3*EXP_W-1:0][4*EXP_W-1:0] fp_exp_and_stuck;
  logic [2*EXP_W-1:0][6*EXP_W-1:0] fp_exp_or_stuck;
  logic [3*EXP_W-1:0][4*EXP_W-1:0] fp_inc_and_stuck;
  logic [2*EXP_W-1:0][6*EXP_W-1:0] fp_inc_or_stuck;
  logic fp_test_start, fp_test_busy, fp_test_done, fp_resilient, fp_unfixable;

  logic sa_in_valid, sa_in_ready, sa_out_valid, sa_sato_on, sa_unfixable;
  logic [NS-1:0][K-1:0] sa_in_data;
  logic [NS-1:0][B-1:0] sa_out_data;
  logic [NS*B-1:0][NS*2*K-1:0] sa_cell_prog, sa_stuck;
  logic [NS-1:0] sa_f_set;

  fame_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_stall = 0, n_test = 0, n_mode_switch = 0, n_ftv_ops = 0, n_corrupt = 0;
  int n_unfix = 0, n_overflow = 0, n_underflow = 0, n_invalid = 0, n_inexact = 0;
  int n_norm_right = 0, n_norm_left = 0, n_eff_sub = 0;
  int n_sato_plain = 0, n_sato_two = 0, n_sato_unfix = 0;

  // ------------------------------------------------------------ FP part
  function automatic logic and_prog(int pt, int w);
    int i = pt / 3, t = pt % 3;
    case (t)
      0: return (w == 4*i) || (w == 4*i+2);
      1: return (w == 4*i) || (w == 4*i+3);
      default: return (w == 4*i+1) || (w == 4*i+2);
    endcase
  endfunction
  function automatic logic or_prog(int o, int w);
    int i = o / 2;
    if (o % 2 == 0) return w == 6*i;
    return (w == 6*i+2) || (w == 6*i+4);
  endfunction
  function automatic logic expect_unfixable();
    logic [4*W-1:0] fa = '0;
    logic [6*W-1:0] fo = '0;
    logic u = 0;
    for (int p = 0; p < 3*W; p++) for (int w = 0; w < 4*W; w++)
      if (fp_and_stuck[p][w] && !and_prog(p, w)) fa[w] = 1;
    for (int o = 0; o < 2*W; o++) for (int w = 0; w < 6*W; w++)
      if (fp_or_stuck[o][w] && !or_prog(o, w)) fo[w] = 1;
    for (int p = 0; p < 3*W; p++) begin
      logic fb = 0;
      for (int w = 0; w < 4*W; w++) if (fp_and_stuck[p][w] && !and_prog(p, w)) fb = 1;
      for (int w = 0; w < 4*W; w++) if (fb && and_prog(p, w) && fa[w]) u = 1;
    end
    for (int o = 0; o < 2*W; o++) begin
      logic fb = 0;
      for (int w = 0; w < 6*W; w++) if (fp_or_stuck[o][w] && !or_prog(o, w)) fb = 1;
      for (int w = 0; w < 6*W; w++) if (fb && or_prog(o, w) && fo[w]) u = 1;
    end
    return u;
  endfunction

  logic [31:0] exp_q[$];
  int          acc_q[$];
  int          exp_lat = 11;
  logic        faults_unknown = 0;

  always @(posedge clk) if (rst_n) begin
    if (fp_in_valid && !fp_in_ready && fp_test_busy) n_stall++;
    if (fp_in_valid && fp_in_ready) begin
      exp_q.push_back(ref_add(fp_a, fp_b, fp_sub));
      acc_q.push_back(cycle);
      if (fp_resilient) n_ftv_ops++;
    end
    if (dut.u_fp.v6 && dut.u_fp.in_ready) begin
      if (dut.u_fp.r6.inc) n_norm_right++;
      if (dut.u_fp.r6.lshift != 0) n_norm_left++;
      if (dut.u_fp.s6.eff_sub) n_eff_sub++;
    end
    if (fp_out_valid) begin
      logic [31:0] e;
      int c0;
      e  = exp_q.pop_front();
      c0 = acc_q.pop_front();
      if (fp_flags.overflow)  n_overflow++;
      if (fp_flags.underflow) n_underflow++;
      if (fp_flags.invalid)   n_invalid++;
      if (fp_flags.inexact)   n_inexact++;
      if (faults_unknown) begin
        if (!same_result(fp_result, e)) n_corrupt++;
      end else begin
        checks += 2;
        if (!same_result(fp_result, e)) begin
          failures++;
          $display("FAIL: fp result %h expected %h", fp_result, e);
        end
        if (cycle - c0 != exp_lat) begin
          failures++;
          $display("FAIL: fp latency %0d expected %0d", cycle - c0, exp_lat);
        end
      end
    end
  end

  task automatic fp_stream(int n);
    int sent = 0;
    while (sent < n) begin
      @(negedge clk);
      if (fp_in_valid && fp_in_ready) sent++;
      if (!fp_in_valid || fp_in_ready) begin
        if (sent < n) begin
          fp_a = rand_fp();
          fp_b = ($urandom_range(0, 2) == 0) ? near_fp(fp_a) : rand_fp();
          fp_sub = $urandom_range(0, 1);
          fp_in_valid = 1;
        end else fp_in_valid = 0;
      end
    end
    fp_in_valid = 0;
    repeat (30) @(negedge clk);
  endtask

  task automatic fp_run_test();
    @(negedge clk) fp_test_start = 1;
    @(negedge clk) fp_test_start = 0;
    while (!fp_test_done) @(negedge clk);
    n_test++;
  endtask

  // ---------------------------------------------------------- SATO part
  logic [NS-1:0][B-1:0] sa_exp_q[$];
  int sa_last = -10;
  always @(posedge clk) if (rst_n) begin
    if (sa_in_valid && sa_in_ready) begin
      logic [NS-1:0][B-1:0] e;
      for (int s = 0; s < NS; s++) begin
        e[s][0] = sa_in_data[s][0] &  sa_in_data[s][1];
        e[s][1] = sa_in_data[s][0] & ~sa_in_data[s][1];
        e[s][2] = ~sa_in_data[s][0] & sa_in_data[s][1];
      end
      sa_exp_q.push_back(e);
      if (sa_sato_on) begin
        n_sato_two++;
        checks++;
        if (cycle - sa_last < 2) begin failures++; $display("FAIL: SATO accepts too fast"); end
      end else n_sato_plain++;
      sa_last = cycle;
    end
    if (sa_out_valid) begin
      logic [NS-1:0][B-1:0] e;
      checks++;
      e = sa_exp_q.pop_front();
      if (sa_out_data != e) begin
        failures++;
        $display("FAIL: SATO output %h expected %h", sa_out_data, e);
      end
    end
  end

  task automatic sa_stream(int n);
    int sent = 0;
    sa_in_data = $urandom;
    sa_in_valid = 1;
    while (sent < n) begin
      @(posedge clk);
      if (sa_in_ready) begin
        sent++;
        #1 sa_in_data = {$urandom, $urandom};
      end
    end
    #1 sa_in_valid = 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    fp_in_valid = 0; fp_a = '0; fp_b = '0; fp_sub = 0; fp_test_start = 0;
    fp_and_stuck = '0; fp_or_stuck = '0; fp_exp_and_stuck = '0; fp_exp_or_stuck = '0;
    fp_inc_and_stuck = '0; fp_inc_or_stuck = '0;
    sa_in_valid = 0; sa_in_data = '0; sa_stuck = '0; sa_f_set = '0;
    sa_cell_prog = '0;
    for (int s = 0; s < NS; s++) begin
      int wa, wb;
      wa = (s*K)*2;
      wb = (s*K + 1)*2;
      sa_cell_prog[s*B][wa] = 1;       sa_cell_prog[s*B][wb] = 1;
      sa_cell_prog[s*B+1][wa] = 1;     sa_cell_prog[s*B+1][wb+1] = 1;
      sa_cell_prog[s*B+2][wa+1] = 1;   sa_cell_prog[s*B+2][wb] = 1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // fault-free adder
    fp_stream(300);

    // a pattern FTV cannot repair: two faulty terms of bit 3, each with a
    // defect on the other's operand wordline
    fp_and_stuck[9][13] = 1; fp_and_stuck[11][12] = 1;
    fp_run_test();
    checks++;
    if (fp_unfixable) n_unfix++; else begin failures++; $display("FAIL: unfixable missed"); end
    // repaired array: a new test clears the flags and the adder is back to
    // one operation per cycle
    fp_and_stuck = '0;
    fp_run_test();
    checks++;
    if (fp_resilient) begin failures++; $display("FAIL: flags not cleared"); end

    // fixable defects in both planes, not yet known: results go wrong
    do begin
      fp_and_stuck = '0; fp_or_stuck = '0;
      repeat (8) fp_and_stuck[$urandom_range(0, 3*W-1)][$urandom_range(0, 4*W-1)] = 1;
      repeat (4) fp_or_stuck[$urandom_range(0, 2*W-1)][$urandom_range(0, 6*W-1)] = 1;
      fp_and_stuck[3*5][4*5+1] = 1;      // a.b term of bit 5 disturbed by ~a
      fp_or_stuck[2*7][6*7+2] = 1;       // g of bit 7 disturbed by the a.~b term
    end while (expect_unfixable());
    fp_exp_and_stuck[3*1][4*1+1] = 1;  // a.b term of exponent bit 1 disturbed by ~a
    fp_inc_and_stuck[3*0][4*0+3] = 1;  // a.b term of inc/dec bit 0 disturbed by ~b
    faults_unknown = 1;
    fp_stream(100);
    faults_unknown = 0;

    // FTV test; an operand waiting meanwhile is stalled
    fork
      begin
        @(negedge clk);
        @(negedge clk);
        fp_a = 32'h3f800000; fp_b = 32'h3f800000; fp_sub = 0; fp_in_valid = 1;
      end
      fp_run_test();
    join
    checks++;
    if (!fp_resilient || fp_unfixable) begin failures++; $display("FAIL: FTV did not switch on"); end
    else n_mode_switch++;
    exp_lat = 21;
    fp_stream(300);

    // SATO array
    sa_stream(100);
    for (int s = 0; s < NS; s += 4) begin
      sa_f_set[s] = 1;
      sa_stuck[s*B + $urandom_range(0, B-1)][$urandom_range(0, NS*2*K-1)] = 1;
      sa_stuck[s*B][(s*K)*2 + 1] = 1;  // a.b term disturbed by ~a
    end
    checks++;
    if (sa_unfixable) begin failures++; $display("FAIL: SATO spurious unfixable"); end
    sa_stream(100);
    sa_f_set[1] = 1;
    #1;
    if (sa_unfixable) n_sato_unfix++;

    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: fp results missing"); end

    $display("mechanisms: stall=%0d tests=%0d ftv_switch=%0d ftv_ops=%0d corrupt_before_test=%0d unfixable=%0d",
             n_stall, n_test, n_mode_switch, n_ftv_ops, n_corrupt, n_unfix);
    $display("            overflow=%0d underflow=%0d invalid=%0d inexact=%0d norm_right=%0d norm_left=%0d eff_sub=%0d",
             n_overflow, n_underflow, n_invalid, n_inexact, n_norm_right, n_norm_left, n_eff_sub);
    $display("            sato_plain=%0d sato_two_cycle=%0d sato_unfixable=%0d",
             n_sato_plain, n_sato_two, n_sato_unfix);
    checks += 16;
    if (n_stall == 0)       begin failures++; $display("FAIL: no stall"); end
    if (n_test == 0)        begin failures++; $display("FAIL: no test"); end
    if (n_mode_switch == 0) begin failures++; $display("FAIL: no mode switch"); end
    if (n_ftv_ops == 0)     begin failures++; $display("FAIL: no FTV operation"); end
    if (n_corrupt == 0)     begin failures++; $display("FAIL: defects never corrupted a result"); end
    if (n_unfix == 0)       begin failures++; $display("FAIL: no unfixable pattern"); end
    if (n_overflow == 0)    begin failures++; $display("FAIL: no overflow"); end
    if (n_underflow == 0)   begin failures++; $display("FAIL: no underflow"); end
    if (n_invalid == 0)     begin failures++; $display("FAIL: no invalid"); end
    if (n_inexact == 0)     begin failures++; $display("FAIL: no inexact"); end
    if (n_norm_right == 0)  begin failures++; $display("FAIL: no right normalisation"); end
    if (n_norm_left == 0)   begin failures++; $display("FAIL: no left normalisation"); end
    if (n_eff_sub == 0)     begin failures++; $display("FAIL: no effective subtraction"); end
    if (n_sato_plain == 0)  begin failures++; $display("FAIL: no plain SATO op"); end
    if (n_sato_two == 0)    begin failures++; $display("FAIL: no two-cycle SATO op"); end
    if (n_sato_unfix == 0)  begin failures++; $display("FAIL: no SATO unfixable"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
