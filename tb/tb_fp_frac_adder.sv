// tb_fp_frac_adder: checks the DCIM-based significand adder at its full
// 27-bit width. Random pairs (with the larger first for subtractions) are
// added or subtracted and compared with integer arithmetic, fault-free and
// then with stuck-at-LRS defects in both planes after the FTV test. Results
// must come two cycles after acceptance (normal) or three after acceptance
// at one operand per two cycles (FTV mode).
module tb_fp_frac_adder;
  localparam int W = 27;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, adv, eff_sub, out_valid;
  logic [W-1:0] a_sig, b_sig;
  logic [W:0] sum;
  logic [3*W-1:0][4*W-1:0] and_stuck;
  logic [2*W-1:0][6*W-1:0] or_stuck;
  logic test_start, test_busy, test_done, resilient, unfixable;
  logic peer_slow = 0, peer_busy = 0;   // stand-alone array

  fp_frac_adder dut (.*);

  int checks = 0, failures = 0, cycle = 0, exp_lat = 2, min_gap = 1, last_acc = -10;
  logic [W:0] exp_q[$];
  int acc_q[$];
  always @(posedge clk) cycle <= cycle + 1;

  logic [W-1:0] a_raw, b_raw;   // operands before inversion for subtraction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_q.push_back(eff_sub ? (W+1)'(a_raw) - (W+1)'(b_raw) : (W+1)'(a_raw) + (W+1)'(b_raw));
      acc_q.push_back(cycle);
      checks++;
      if (cycle - last_acc < min_gap) begin failures++; $display("FAIL: rate"); end
      last_acc = cycle;
    end
    if (out_valid) begin
      logic [W:0] e;
      int c0;
      e = exp_q.pop_front();
      c0 = acc_q.pop_front();
      checks += 2;
      if (sum != e) begin failures++; $display("FAIL: sum %h exp %h", sum, e); end
      if (cycle - c0 != exp_lat) begin failures++; $display("FAIL: latency %0d", cycle - c0); end
    end
  end

  task automatic new_op();
    logic [W-1:0] x, y;
    x = W'({$urandom, $urandom});
    y = W'({$urandom, $urandom});
    if ($urandom_range(0, 3) == 0) y = x ^ W'(1 << $urandom_range(0, W-1));
    eff_sub = $urandom_range(0, 1);
    if (eff_sub && y > x) begin a_raw = y; b_raw = x; end
    else begin a_raw = x; b_raw = y; end
    a_sig = a_raw;
    b_sig = eff_sub ? ~b_raw : b_raw;
  endtask

  task automatic stream(int n);
    int sent = 0;
    new_op();
    in_valid = 1;
    while (sent < n) begin
      @(posedge clk);
      if (in_ready) begin
        sent++;
        #1 new_op();
      end
    end
    #1 in_valid = 0;
    repeat (8) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; a_sig = '0; b_sig = '0; eff_sub = 0; a_raw = '0; b_raw = '0;
    test_start = 0; and_stuck = '0; or_stuck = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    stream(300);
    // one defect per product term type in different bits, and two in the OR plane
    and_stuck[3*2][4*2+1]     = 1;  // a.b of bit 2 on ~a
    and_stuck[3*9+1][4*9+2]   = 1;  // a.~b of bit 9 on b
    and_stuck[3*20+2][4*5]    = 1;  // ~a.b of bit 20 on a of bit 5
    or_stuck[2*4][6*4+2]      = 1;  // g of bit 4 on the a.~b term
    or_stuck[2*15+1][6*15]    = 1;  // p of bit 15 on the a.b term
    @(negedge clk) test_start = 1;
    @(negedge clk) test_start = 0;
    while (!test_done) @(negedge clk);
    checks += 2;
    if (!resilient) begin failures++; $display("FAIL: not resilient"); end
    if (unfixable)  begin failures++; $display("FAIL: unfixable"); end
    exp_lat = 3;
    min_gap = 2;
    stream(300);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
