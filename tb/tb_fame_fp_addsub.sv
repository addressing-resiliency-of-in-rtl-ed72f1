// tb_fame_fp_addsub: self-checking test of the pipelined floating-point
// adder/subtractor with its three DCIM arrays (exponent difference,
// fraction addition, exponent inc/dec).
//
// Random and edge-case operand pairs are streamed with random gaps and every
// result is compared with an exact reference (tb_fp_ref_pkg). The test runs
// the pipeline fault-free; then with a defect only in the inc/dec array
// (the other two must follow it into two-cycle mode); then with
// stuck-at-LRS cells in both planes of all arrays. Each time it runs the
// built-in FTV test and streams again in the two-cycle mode. It checks the
// latency (11 cycles, 21 in FTV mode), that no
// operand is accepted on consecutive cycles in FTV mode, and that the test
// reports an unfixable fault pattern when one is injected.
module tb_fame_fp_addsub;
  import fame_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int W = SIG_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, sub, out_valid;
  fp32_t a, b, result;
  fp_flags_t flags;
  logic [3*W-1:0][4*W-1:0] and_stuck;
  logic [2*W-1:0][6*W-1:0] or_stuck;
  logic [3*EXP_W-1:0][4*EXP_W-1:0] exp_and_stuck;
  logic [2*EXP_W-1:0][6*EXP_W-1:0] exp_or_stuck;
  logic [3*EXP_W-1:0][4*EXP_W-1:0] inc_and_stuck;
  logic [2*EXP_W-1:0][6*EXP_W-1:0] inc_or_stuck;
  logic test_start, test_busy, test_done, resilient, unfixable;

  fame_fp_addsub dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // cell programs of the fraction array (1 = LRS)
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

  // A faulty bitline whose own operand sits on a flagged wordline cannot be fixed.
  function automatic logic expect_unfixable();
    logic [4*W-1:0] fa = '0;
    logic [6*W-1:0] fo = '0;
    logic u = 0;
    for (int p = 0; p < 3*W; p++) for (int w = 0; w < 4*W; w++)
      if (and_stuck[p][w] && !and_prog(p, w)) fa[w] = 1;
    for (int o = 0; o < 2*W; o++) for (int w = 0; w < 6*W; w++)
      if (or_stuck[o][w] && !or_prog(o, w)) fo[w] = 1;
    for (int p = 0; p < 3*W; p++) begin
      logic fb = 0;
      for (int w = 0; w < 4*W; w++) if (and_stuck[p][w] && !and_prog(p, w)) fb = 1;
      for (int w = 0; w < 4*W; w++) if (fb && and_prog(p, w) && fa[w]) u = 1;
    end
    for (int o = 0; o < 2*W; o++) begin
      logic fb = 0;
      for (int w = 0; w < 6*W; w++) if (or_stuck[o][w] && !or_prog(o, w)) fb = 1;
      for (int w = 0; w < 6*W; w++) if (fb && or_prog(o, w) && fo[w]) u = 1;
    end
    return u;
  endfunction

  task automatic inject(int n_and, int n_or);
    and_stuck = '0;
    or_stuck  = '0;
    repeat (n_and) and_stuck[$urandom_range(0, 3*W-1)][$urandom_range(0, 4*W-1)] = 1'b1;
    repeat (n_or)  or_stuck[$urandom_range(0, 2*W-1)][$urandom_range(0, 6*W-1)] = 1'b1;
  endtask

  task automatic run_test();
    @(negedge clk) test_start = 1;
    @(negedge clk) test_start = 0;
    while (!test_done) @(negedge clk);
  endtask

  // scoreboard
  logic [31:0] exp_q[$];
  int          acc_cycle_q[$];
  int          exp_lat = 11;
  int          last_acc = -10;
  logic        ftv_mode = 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_q.push_back(ref_add(a, b, sub));
      acc_cycle_q.push_back(cycle);
      if (ftv_mode) begin
        checks++;
        if (cycle - last_acc < 2) begin
          failures++;
          $display("FAIL: accepts %0d cycles apart in FTV mode", cycle - last_acc);
        end
      end
      last_acc = cycle;
    end
    if (out_valid) begin
      logic [31:0] e;
      int c0;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures += 2;
        $display("FAIL: unexpected result");
      end else begin
        e  = exp_q.pop_front();
        c0 = acc_cycle_q.pop_front();
        if (!same_result(result, e)) begin
          failures++;
          $display("FAIL: result %h expected %h", result, e);
        end
        if (cycle - c0 != exp_lat) begin
          failures++;
          $display("FAIL: latency %0d expected %0d", cycle - c0, exp_lat);
        end
      end
    end
  end

  task automatic stream(int n);
    int sent = 0;
    while (sent < n) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        if (in_valid && in_ready) sent++;
      end
      if (!in_valid || (in_valid && in_ready)) begin
        if (sent < n && $urandom_range(0, 3) != 0) begin
          a = rand_fp();
          b = ($urandom_range(0, 2) == 0) ? near_fp(a) : rand_fp();
          sub = $urandom_range(0, 1);
          in_valid = 1;
        end else in_valid = 0;
      end
      // in_ready is evaluated at the edge; count acceptance there
      @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; a = '0; b = '0; sub = 0; test_start = 0;
    and_stuck = '0; or_stuck = '0; exp_and_stuck = '0; exp_or_stuck = '0;
    inc_and_stuck = '0; inc_or_stuck = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    stream(400);

    // an unfixable pattern: two faulty product terms of bit 3, each with a
    // defect on the other's operand wordline (a.b uses 12, ~a.b uses 13)
    and_stuck[9][13]  = 1'b1;   // a.b bitline, cell on ~a: flags wordline 13
    and_stuck[11][12] = 1'b1;   // ~a.b bitline, cell on a: flags wordline 12
    run_test();
    checks++;
    if (!unfixable) begin failures++; $display("FAIL: unfixable not reported"); end

    // a defect only in the inc/dec array: a.b of exponent bit 2 on ~a
    and_stuck = '0; or_stuck = '0;
    inc_and_stuck[3*2][4*2+1] = 1'b1;
    run_test();
    checks += 2;
    if (!resilient) begin failures++; $display("FAIL: exponent fault not found"); end
    if (unfixable)  begin failures++; $display("FAIL: spurious unfixable"); end
    ftv_mode = 1;
    exp_lat  = 21;
    stream(150);

    // fixable random defects in both planes of all arrays
    do inject(6, 4); while (expect_unfixable());
    exp_or_stuck[2*5+1][6*5] = 1'b1;   // p of exponent bit 5 on its a.b term
    exp_and_stuck[3*2][4*2+1] = 1'b1;  // a.b of exponent bit 2 on ~a
    inc_or_stuck[2*3][6*3+2]  = 1'b1;  // g of bit 3 on its a.~b term
    run_test();
    checks += 2;
    if (!resilient) begin failures++; $display("FAIL: no fault found"); end
    if (unfixable)  begin failures++; $display("FAIL: spurious unfixable"); end
    stream(300);

    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
