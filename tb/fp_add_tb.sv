// fp_add_tb: checks the FP32 round-to-nearest-even adder against double-
// precision addition rounded to FP32. Directed cases cover exact
// cancellation, signed zeros, ties to even, carry out of rounding, overflow,
// infinities and NaN; random cases mix wide and close exponents, and
// opposite-sign operands with nearly equal magnitude to exercise the
// leading-zero renormalisation.
module fp_add_tb;
  import fp_ref_pkg::*;

  logic [31:0] a, b, s;
  int checks = 0, failures = 0;

  fp_add dut (.a(a), .b(b), .s(s));

  task automatic check_exp(logic [31:0] x, logic [31:0] y, logic [31:0] e);
    a = x; b = y;
    #1;
    checks++;
    if (s !== e) begin
      failures++;
      if (failures < 10) $display("FAIL fp_add %h + %h = %h, expected %h", x, y, s, e);
    end
  endtask

  task automatic check_pair(logic [31:0] x, logic [31:0] y);
    check_exp(x, y, real_to_fp32(fp32_to_real(x) + fp32_to_real(y)));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, y;
    check_exp(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000);  // 1 + 1
    check_exp(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);  // 1 - 1 = +0
    check_exp(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);  // -0 + -0
    check_exp(32'h0000_0000, 32'h8000_0000, 32'h0000_0000);  // +0 + -0
    check_exp(32'h4B80_0000, 32'h3F80_0000, 32'h4B80_0000);  // 2^24 + 1: tie, stays even
    check_exp(32'h4B80_0001, 32'h3F80_0000, 32'h4B80_0002);  // tie rounds up to even
    check_exp(32'h3FFF_FFFF, 32'h3400_0000, 32'h4000_0000);  // rounding carries out
    check_exp(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow
    check_exp(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);  // inf + 1
    check_exp(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);  // inf - inf
    check_exp(32'h7FC0_0000, 32'h3F80_0000, 32'h7FC0_0000);  // NaN
    check_exp(32'h3F80_0000, 32'h0000_0000, 32'h3F80_0000);  // 1 + 0
    repeat (20000) check_pair(rand_fp32(60, 190), rand_fp32(60, 190));
    repeat (20000) begin
      x = rand_fp32(100, 150);
      y = rand_fp32(1, 254);
      y[30:23] = 8'(int'(x[30:23]) + int'($urandom % 5) - 2);
      check_pair(x, y);
    end
    repeat (20000) begin
      x = rand_fp32(100, 150);
      y = x ^ 32'h8000_0000;
      y[5:0] = 6'($urandom);
      if ($urandom % 2) y[30:23] = y[30:23] - 8'd1;
      check_pair(x, y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
