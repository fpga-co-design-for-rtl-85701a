// operand_fifo_tb: random push/pop traffic (never pushing when full nor
// popping when empty) against a queue model; checks dout, empty, full and
// count every cycle, includes simultaneous push and pop at full and empty,
// and runs a fill-to-full / drain-to-empty sweep.
module operand_fifo_tb;
  localparam int W = 16, D = 5;

  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0, n_both = 0;
  logic [W-1:0] q[$];

  operand_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL operand_fifo %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(logic want_push, logic want_pop);
    push = want_push && (q.size() < D || want_pop && q.size() > 0);
    pop  = want_pop && q.size() > 0;
    din  = W'($urandom);
    if (push && pop) n_both++;
    @(posedge clk);
    if (pop) void'(q.pop_front());
    if (push) q.push_back(din);
    #1;
    check(count == ($clog2(D+1))'(q.size()), "count");
    check(empty == (q.size() == 0), "empty");
    check(full == (q.size() == D), "full");
    if (q.size() == D) n_full++;
    if (q.size() > 0) check(dout == q[0], "dout");
    @(negedge clk);
  endtask

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "after reset");
    repeat (3000) step(($urandom % 3) != 0, ($urandom % 2) != 0);
    repeat (2 * D) step(1, 0);
    repeat (4) step(1, 1);
    repeat (2 * D) step(0, 1);
    repeat (3000) step(($urandom % 2) != 0, ($urandom % 3) != 0);
    check(n_full > 0 && n_both > 0, "full and push+pop cases reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
