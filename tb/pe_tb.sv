// pe_tb: drives one zero-skipping PE with random operand streams, some
// weights zero (both +0 and -0), some cycles invalid, and checks every cycle:
// the forwarded operands equal the inputs of the previous cycle, mac_fire and
// skip follow the registered weight, and the partial sum equals a reference
// accumulation done in double precision and rounded to FP32 after each add.
// Also checks that clear zeroes the partial sum.
module pe_tb;
  import nm_pkg::*;
  import fp_ref_pkg::*;

  logic  clk = 0, rst_n = 0, clear = 0;
  op16_t a_in, w_in, a_out, w_out;
  fp32_t psum;
  logic  mac_fire, skip;
  int checks = 0, failures = 0, n_fire = 0, n_skip = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL pe %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op16_t a_prev, w_prev;
    fp32_t ref_acc;
    a_in = '0; w_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(psum == 32'd0, "reset value");
    ref_acc = 32'd0;
    a_prev = '0; w_prev = '0;
    for (int t = 0; t < 4000; t++) begin
      // new operands, applied away from the clock edge
      a_in.vld = ($urandom % 8) != 0;
      w_in.vld = ($urandom % 8) != 0;
      a_in.val = rand_fp16(8, 20);
      case ($urandom % 4)
        0: w_in.val = 16'h0000;
        1: w_in.val = 16'h8000;
        default: w_in.val = rand_fp16(8, 20);
      endcase
      clear = (t == 2000);
      @(posedge clk);
      #1;
      check(a_out == a_in && w_out == w_in, "operand forwarding");
      // the registered operands decide this cycle's MAC
      check(mac_fire == (a_in.vld && w_in.vld && w_in.val[14:0] != 0), "mac_fire");
      check(skip     == (a_in.vld && w_in.vld && w_in.val[14:0] == 0), "skip");
      if (clear) ref_acc = 32'd0;
      check(psum == ref_acc, "partial sum");
      if (mac_fire) begin
        n_fire++;
        ref_acc = real_to_fp32(fp32_to_real(ref_acc) +
                               fp16_to_real(a_in.val) * fp16_to_real(w_in.val));
      end
      if (skip) n_skip++;
      @(negedge clk);
    end
    clear = 0;
    @(posedge clk); #1;
    check(psum == ref_acc, "final partial sum");
    check(n_fire > 1000 && n_skip > 500, "both MAC and skip happened");
    $display("pe_tb: %0d MACs, %0d skipped", n_fire, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
