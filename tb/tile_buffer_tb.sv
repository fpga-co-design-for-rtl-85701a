// tile_buffer_tb: writes random words to random addresses of a small
// buffer, reads them back through the registered read port against a model,
// and checks the one-cycle read latency, that rdata holds while re is low,
// and read-before-write when both hit the same address in one cycle.
module tile_buffer_tb;
  localparam int W = 48, D = 12;

  logic clk = 0, we = 0, re = 0;
  logic [$clog2(D)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  tile_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL tile_buffer %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q, held;
    // fill every word
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = ($clog2(D))'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      we    = ($urandom % 2) != 0;
      re    = ($urandom % 4) != 0;
      waddr = ($clog2(D))'($urandom % D);
      raddr = ($urandom % 3 == 0) ? waddr : ($clog2(D))'($urandom % D);
      wdata = {$urandom, $urandom};
      held  = rdata;
      expect_q = model[raddr];          // old contents: read before write
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      if (re) check(rdata == expect_q, "read data");
      else    check(rdata == held, "rdata held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
