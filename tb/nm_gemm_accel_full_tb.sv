// nm_gemm_accel_full_tb: one complete tile operation of the accelerator at
// its default size (16 x 16 PE grid, 512-deep tile buffers): a 16 x 512 FP16
// activation tile times a 512 x 16 weight tile pruned 2:4 by magnitude and
// quantized to INT4, then dequantized to FP16. Checks the latency
// (512 + 2*16 + 16 + 2 = 562 cycles from start to done), all 256 outputs
// against a sequential FP32 reference, and that at least half of the
// 131072 MACs were skipped (exactly the zero weights: 2:4 pruning plus
// survivors that quantize to 0). A second run with a 4:16 tile follows.
module nm_gemm_accel_full_tb;
  import nm_pkg::*;
  import fp_ref_pkg::*;

  localparam int R = 16, C = 16, KM = 512;

  logic clk = 0, rst_n = 0;
  logic start = 0, accumulate = 0, busy, done;
  logic [$clog2(KM+1)-1:0] k_len = '0;
  logic a_wr_en = 0, b_wr_en = 0, out_rd_en = 0;
  logic [$clog2(KM)-1:0] a_wr_addr = '0, b_wr_addr = '0;
  logic [R-1:0][15:0] a_wr_data = '0;
  logic [C-1:0][15:0] b_wr_data = '0;
  logic [$clog2(R)-1:0] out_rd_addr = '0;
  logic [C-1:0][31:0] out_rd_data;
  logic [31:0] mac_count, skip_count;

  nm_gemm_accel dut (.*);

  int checks = 0, failures = 0;
  int n_mac = 0, n_skip = 0, n_clear = 0, n_accum = 0, max_fifo = 0;
  fp16_t A [R][KM];
  fp16_t W [KM][C];
  fp32_t ref_c [R][C];

  always #5 clk = ~clk;

  always @(posedge clk)
    if (int'(dut.g_dfifo[R-1].u_fifo.count) > max_fifo) max_fifo = int'(dut.g_dfifo[R-1].u_fifo.count);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL nm_gemm_accel %s at %0t", what, $time);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // new operands: activations random, weights N:M pruned and INT4 quantized
  task automatic make_tile(int k, int n, int m);
    real inv_s;
    real w[];
    logic [15:0] wq[];
    int sh;
    sh    = int'($urandom % 4);
    inv_s = 4.0 / 7.0 / real'(1 << sh);
    w = new[k];
    for (int r = 0; r < R; r++)
      for (int kk = 0; kk < k; kk++) A[r][kk] = rand_fp16(12, 17);
    for (int c = 0; c < C; c++) begin
      for (int kk = 0; kk < k; kk++) w[kk] = real'(int'($urandom % 2001) - 1000) / 250.0;
      if (n == 0) begin
        for (int kk = 0; kk < k; kk++) W[kk][c] = (kk % 2) ? 16'h0000 : 16'h8000;
      end else begin
        nm_prune_quant(w, n, m, inv_s, wq);
        for (int kk = 0; kk < k; kk++) W[kk][c] = wq[kk];
      end
    end
  endtask

  task automatic load_tile(int k);
    for (int kk = 0; kk < k; kk++) begin
      @(negedge clk);
      a_wr_en = 1; a_wr_addr = ($clog2(KM))'(kk);
      b_wr_en = 1; b_wr_addr = ($clog2(KM))'(kk);
      for (int r = 0; r < R; r++) a_wr_data[r] = A[r][kk];
      for (int c = 0; c < C; c++) b_wr_data[c] = W[kk][c];
    end
    @(negedge clk);
    a_wr_en = 0; b_wr_en = 0;
  endtask

  // run a tile, check latency, results and counters
  task automatic run_tile(int k, logic acc, string name);
    int cyc = 1, nz = 0;
    if (!acc) foreach (ref_c[r, c]) ref_c[r][c] = 32'd0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        for (int kk = 0; kk < k; kk++)
          if (W[kk][c][14:0] != 0)
            ref_c[r][c] = real_to_fp32(fp32_to_real(ref_c[r][c]) +
                                       fp16_to_real(A[r][kk]) * fp16_to_real(W[kk][c]));
    for (int c = 0; c < C; c++)
      for (int kk = 0; kk < k; kk++) if (W[kk][c][14:0] != 0) nz++;
    @(negedge clk);
    start = 1; k_len = ($clog2(KM+1))'(k); accumulate = acc;
    @(posedge clk);
    #1 start = 0;
    while (!done) begin
      @(posedge clk);
      #1 cyc++;
    end
    check(cyc == k + 2 * R + C + 2, {name, ": latency"});
    @(posedge clk);
    #1;
    check(!busy, {name, ": idle after done"});
    if (!acc) begin
      check(mac_count == 32'(nz * R), {name, ": mac_count"});
      check(skip_count == 32'((k * C - nz) * R), {name, ": skip_count"});
      n_clear++;
    end else n_accum++;
    n_mac  += int'(mac_count);
    n_skip += int'(skip_count);
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      out_rd_en = 1; out_rd_addr = ($clog2(R))'(r);
      @(posedge clk);
      #1;
      for (int c = 0; c < C; c++) begin
        check(out_rd_data[c] == ref_c[r][c], {name, ": output element"});
        if (out_rd_data[c] != ref_c[r][c] && failures < 10)
          $display("  C[%0d][%0d] = %h, expected %h", r, c, out_rd_data[c], ref_c[r][c]);
      end
    end
    @(negedge clk);
    out_rd_en = 0;
  endtask

  task automatic pattern(int k, int n, int m, string name);
    make_tile(k, n, m);
    load_tile(k);
    run_tile(k, 0, name);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    pattern(KM, 2, 4, "2:4 full tile");
    check(2 * mac_count <= 32'(R * C * KM), "2:4 skips at least half of the MACs");
    pattern(KM, 4, 16, "4:16 full tile");
    $display("mechanisms: mac=%0d skip=%0d clear=%0d accumulate=%0d max_fifo_fill=%0d",
             n_mac, n_skip, n_clear, n_accum, max_fifo);
    check(n_mac > 0, "MAC performed");
    check(n_skip > 0, "MAC skipped");
    check(n_clear > 0, "clear");
    check(max_fifo >= R, "FIFO skew occupancy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
