// tb_sato_array: checks the SATO-protected array with a small configuration
// (6 sets of 2 inputs and the three adder product terms a.b, a.~b, ~a.b).
// Fault-free, results must appear one cycle after acceptance at one operand
// per cycle. With defects in non-adjacent sets that are flagged, every slice
// must still be right, at one operand per two cycles. Adjacent faulty sets
// (including the wrap from the last set to the first) must be reported as
// unfixable, and defects that are not flagged must corrupt results.
module tb_sato_array;
  localparam int NS = 6, K = 2, B = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, sato_on, unfixable;
  logic [NS-1:0][K-1:0] in_data;
  logic [NS-1:0][B-1:0] out_data;
  logic [NS*B-1:0][NS*2*K-1:0] cell_prog, stuck_lrs;
  logic [NS-1:0] f_set;

  sato_array #(.N_SET(NS), .K(K), .B(B)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, corrupt = 0, last_acc = -10, min_gap = 1;
  logic expect_ok = 1;
  logic [NS-1:0][B-1:0] exp_q[$];
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
      if (cycle - last_acc < min_gap) begin failures++; $display("FAIL: rate"); end
      last_acc = cycle;
    end
    if (out_valid) begin
      logic [NS-1:0][B-1:0] e;
      int c0;
      e = exp_q.pop_front();
      c0 = acc_q.pop_front();
      if (expect_ok) begin
        checks += 2;
        if (out_data != e) begin failures++; $display("FAIL: out %h exp %h", out_data, e); end
        if (cycle - c0 != 1) begin failures++; $display("FAIL: latency %0d", cycle - c0); end
      end else if (out_data != e) corrupt++;
    end
  end

  task automatic stream(int n);
    int sent = 0;
    in_data = (NS*K)'($urandom);
    in_valid = 1;
    while (sent < n) begin
      @(posedge clk);
      if (in_ready) begin
        sent++;
        #1 in_data = (NS*K)'($urandom);
      end
    end
    #1 in_valid = 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = '0; stuck_lrs = '0; f_set = '0; cell_prog = '0;
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
    stream(100);

    // defects in sets 1 and 3, not flagged yet
    stuck_lrs[1*B + 0][(1*K)*2 + 1] = 1;   // a.b of set 1 disturbed by ~a
    stuck_lrs[3*B + 2][(5*K)*2]     = 1;   // ~a.b of set 3 disturbed by a of slice 5
    expect_ok = 0;
    stream(60);
    expect_ok = 1;
    checks++;
    if (corrupt == 0) begin failures++; $display("FAIL: defects never showed"); end

    f_set = 6'b001010;
    #1;
    checks += 2;
    if (!sato_on)  begin failures++; $display("FAIL: SATO off"); end
    if (unfixable) begin failures++; $display("FAIL: spurious unfixable"); end
    min_gap = 2;
    stream(150);

    f_set = 6'b100001;   // last and first set: adjacent through the wrap
    #1;
    checks++;
    if (!unfixable) begin failures++; $display("FAIL: wrap adjacency missed"); end
    f_set = 6'b000110;
    #1;
    checks++;
    if (!unfixable) begin failures++; $display("FAIL: adjacency missed"); end

    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: results missing"); end
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
