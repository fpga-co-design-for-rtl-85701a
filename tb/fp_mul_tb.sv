// fp_mul_tb: checks the FP16 x FP16 -> FP32 multiplier against double-
// precision arithmetic. Directed cases cover zeros of both signs, subnormal
// inputs, the largest and smallest magnitudes, infinity and NaN; then random
// normal and subnormal operands. Every finite product must be exact.
module fp_mul_tb;
  import fp_ref_pkg::*;

  logic [15:0] a, b;
  logic [31:0] p;
  int checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .p(p));

  task automatic check_pair(logic [15:0] x, logic [15:0] y);
    logic [31:0] exp_p;
    a = x; b = y;
    #1;
    exp_p = real_to_fp32(fp16_to_real(x) * fp16_to_real(y));
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10)
        $display("FAIL fp_mul %h * %h = %h, expected %h", x, y, p, exp_p);
    end
  endtask

  task automatic check_special(logic [15:0] x, logic [15:0] y, logic [31:0] exp_p);
    a = x; b = y;
    #1;
    checks++;
    if (p !== exp_p) begin
      failures++;
      $display("FAIL fp_mul special %h * %h = %h, expected %h", x, y, p, exp_p);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_pair(16'h3C00, 16'h3C00);   // 1 * 1
    check_pair(16'h4000, 16'hC200);   // 2 * -3
    check_pair(16'h0000, 16'h4500);   // 0 * 5
    check_pair(16'h8000, 16'h4500);   // -0 * 5
    check_pair(16'h7BFF, 16'h7BFF);   // max * max
    check_pair(16'h0001, 16'h0001);   // smallest subnormals
    check_pair(16'h03FF, 16'h3555);
    check_pair(16'h0200, 16'hBC01);
    check_special(16'h7C00, 16'h3C00, 32'h7F80_0000);   // inf * 1
    check_special(16'h7C00, 16'hBC00, 32'hFF80_0000);   // inf * -1
    check_special(16'h7C00, 16'h0000, 32'h7FC0_0000);   // inf * 0
    check_special(16'h7E00, 16'h3C00, 32'h7FC0_0000);   // NaN
    repeat (20000) check_pair(rand_fp16(1, 30), rand_fp16(1, 30));
    repeat (2000)  check_pair(rand_fp16(0, 0), rand_fp16(0, 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
