// gemm_controller_tb: runs the tile sequencer (4 rows x 3 columns, K up to
// 16) for several k_len values, with and without accumulate, and checks its
// schedule cycle by cycle against the intended timing:
//  - buffer reads on k_len consecutive cycles, addresses 0..k_len-1,
//  - FIFO push one cycle after each read, pop of row lane r / column lane c
//    1+r / 1+c cycles after each push,
//  - Output Buffer writes of rows 0..ROWS-1 right after the flush,
//  - done exactly k_len + 2*ROWS + COLS + 2 cycles after start, busy until
//    then, clear_acc only for runs without accumulate,
//  - a start pulse while busy is ignored.
module gemm_controller_tb;
  import nm_pkg::*;

  localparam int R = 4, C = 3, KM = 16;

  logic clk = 0, rst_n = 0, start = 0, accumulate = 0;
  logic [$clog2(KM+1)-1:0] k_len = '0;
  logic busy, done, clear_acc, buf_re, fifo_push, out_we;
  ctrl_state_e state;
  logic [$clog2(KM)-1:0] buf_raddr;
  logic [$clog2(R)-1:0]  out_waddr;
  logic a_pop [R];
  logic w_pop [C];
  int checks = 0, failures = 0;

  gemm_controller #(.ROWS(R), .COLS(C), .KMAX(KM)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL gemm_controller %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one run; t = 0 is the cycle in which start is sampled
  task automatic run(int k, logic acc);
    int lat = k + 2 * R + C + 2;
    @(negedge clk);
    start = 1; k_len = ($clog2(KM+1))'(k); accumulate = acc;
    for (int t = 0; t <= lat + 2; t++) begin
      @(posedge clk);
      #1;
      start = 0;
      // state after edge t is the state of cycle t+1
      begin
        int c1 = t + 1;
        logic exp_re   = (c1 >= 1 && c1 <= k);
        logic exp_push = (c1 >= 2 && c1 <= k + 1);
        int   dr       = c1 - (1 + k + R + C + 1);
        check(buf_re == exp_re, "buffer read strobe");
        if (exp_re) check(int'(buf_raddr) == c1 - 1, "buffer read address");
        check(fifo_push == exp_push, "fifo push");
        for (int r = 0; r < R; r++)
          check(a_pop[r] == (c1 - 3 - r >= 0 && c1 - 3 - r < k), "data fifo pop skew");
        for (int c = 0; c < C; c++)
          check(w_pop[c] == (c1 - 3 - c >= 0 && c1 - 3 - c < k), "weight fifo pop skew");
        check(out_we == (dr >= 0 && dr < R), "output write strobe");
        if (dr >= 0 && dr < R) check(int'(out_waddr) == dr, "output write row");
        check(clear_acc == (c1 == 1 && !acc), "clear_acc");
        check(done == (c1 == lat), "done latency");
        check(busy == (c1 >= 1 && c1 <= lat), "busy");
      end
      // a start while busy must be ignored
      if (t == 3) begin
        @(negedge clk);
        start = 1; k_len = 1;
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(5, 0);
    run(16, 1);
    run(1, 0);
    run(0, 0);
    for (int i = 0; i < 10; i++) run(1 + int'($urandom % KM), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
