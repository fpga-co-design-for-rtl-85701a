// pe_array_tb: runs the PE grid (default 16 x 16) on two tiles. The test
// drives the left and top edges directly with the systolic skew (row r and
// column c delayed by r and c cycles), using random FP16 activations and
// weight columns pruned to 2:4 along K, then checks:
//  - every partial sum against a sequential FP32 reference,
//  - the arrival time: PE (r,c) must hold its final sum exactly
//    K + r + c + 1 cycles after the first operand entered, and one cycle
//    earlier must still hold the sum of the first K-1 products,
//  - mac_count and skip_count against the number of nonzero and zero
//    weights (skipping removes exactly half the MACs for 2:4),
//  - that a second tile, after clear, starts again from zero.
module pe_array_tb;
  import nm_pkg::*;
  import fp_ref_pkg::*;

  localparam int R = 16, C = 16, K = 24;

  logic  clk = 0, rst_n = 0, clear = 0;
  op16_t a_left [R];
  op16_t w_top  [C];
  fp32_t psum   [R][C];
  logic [31:0] mac_count, skip_count;
  int checks = 0, failures = 0;

  fp16_t A [R][K];
  fp16_t W [K][C];
  fp32_t ref_part [R][C];   // sum of the first K-1 products
  fp32_t ref_full [R][C];

  pe_array dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL pe_array %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operands for a tile; W pruned 2:4 along K in every column
  task automatic make_tile();
    for (int r = 0; r < R; r++)
      for (int k = 0; k < K; k++) A[r][k] = rand_fp16(10, 18);
    for (int c = 0; c < C; c++)
      for (int g = 0; g < K / 4; g++) begin
        int keep0, keep1;
        keep0 = $urandom % 4;
        keep1 = (keep0 + 1 + $urandom % 3) % 4;
        for (int j = 0; j < 4; j++)
          W[4*g+j][c] = (j == keep0 || j == keep1) ? rand_fp16(10, 18) : 16'h0000;
      end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        fp32_t acc = 32'd0;
        for (int k = 0; k < K; k++) begin
          if (k == K - 1) ref_part[r][c] = acc;
          if (W[k][c][14:0] != 0)
            acc = real_to_fp32(fp32_to_real(acc) + fp16_to_real(A[r][k]) * fp16_to_real(W[k][c]));
        end
        ref_full[r][c] = acc;
      end
  endtask

  // drive the skewed edges for one tile; cycle t = 0 is the first entry
  task automatic run_tile();
    int nz = 0;
    for (int k = 0; k < K; k++)
      for (int c = 0; c < C; c++) if (W[k][c][14:0] != 0) nz++;
    for (int t = 0; t < K + R + C + 4; t++) begin
      for (int r = 0; r < R; r++) begin
        int k = t - r;
        a_left[r].vld = (k >= 0 && k < K);
        a_left[r].val = (k >= 0 && k < K) ? A[r][k] : fp16_t'($urandom);
      end
      for (int c = 0; c < C; c++) begin
        int k = t - c;
        w_top[c].vld = (k >= 0 && k < K);
        w_top[c].val = (k >= 0 && k < K) ? W[k][c] : fp16_t'($urandom);
      end
      @(posedge clk);
      #1;
      // after edge t, PE (r,c) has seen operands up to k = t - r - c - 1
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          if (t == K + r + c - 1) check(psum[r][c] == ref_part[r][c], "sum one cycle before final");
          if (t == K + r + c)     check(psum[r][c] == ref_full[r][c], "final sum on time");
        end
      @(negedge clk);
    end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) check(psum[r][c] == ref_full[r][c], "final sum held");
    check(mac_count == 32'(nz * R), "mac_count");
    check(skip_count == 32'((K * C - nz) * R), "skip_count");
    check(2 * mac_count == 32'(K * R * C), "2:4 halves the MACs");
  endtask

  initial begin
    for (int r = 0; r < R; r++) a_left[r] = '0;
    for (int c = 0; c < C; c++) w_top[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    make_tile();
    run_tile();
    // second tile after clear
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    check(psum[R-1][C-1] == 32'd0 && mac_count == 0, "clear");
    @(negedge clk);
    make_tile();
    run_tile();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
