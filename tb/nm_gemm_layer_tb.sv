// nm_gemm_layer_tb: a whole linear layer larger than one tile, run the way
// the host software runs it, with the accelerator at its default size
// (16 x 16 grid, 512-deep buffers).
//
// C(BxM) = A(BxK) W(KxM) with B = 32, K = 1024, M = 32: 2 x 2 output tiles,
// each split into two K runs of 512 (the second with accumulate). W is
// pruned 2:4 along K by magnitude and quantized to INT4 with one global
// scale, then dequantized to FP16. This is the layer computation evaluated
// for 4096 x 4096 and larger matrices at batch 512, scaled down to what a
// simulation can do; only the tile counts differ. Checks every element of C
// against a sequential FP32 reference, every run's latency, and that the
// MACs performed over the layer equal the nonzero weights times the batch.
module nm_gemm_layer_tb;
  import nm_pkg::*;
  import fp_ref_pkg::*;

  localparam int R = 16, C = 16, KM = 512;
  localparam int BATCH = 32, KDIM = 1024, MDIM = 32;

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
  longint total_mac = 0, nz_total = 0;
  fp16_t A [BATCH][KDIM];
  fp16_t W [KDIM][MDIM];

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL layer %s at %0t", what, $time);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int bt, int mt, int kt);
    int cyc = 1;
    for (int kk = 0; kk < KM; kk++) begin
      @(negedge clk);
      a_wr_en = 1; a_wr_addr = ($clog2(KM))'(kk);
      b_wr_en = 1; b_wr_addr = ($clog2(KM))'(kk);
      for (int r = 0; r < R; r++) a_wr_data[r] = A[bt*R + r][kt*KM + kk];
      for (int c = 0; c < C; c++) b_wr_data[c] = W[kt*KM + kk][mt*C + c];
    end
    @(negedge clk);
    a_wr_en = 0; b_wr_en = 0;
    start = 1; k_len = ($clog2(KM+1))'(KM); accumulate = (kt != 0);
    @(posedge clk);
    #1 start = 0;
    while (!done) begin
      @(posedge clk);
      #1 cyc++;
    end
    check(cyc == KM + 2 * R + C + 2, "run latency");
    if (kt == KDIM / KM - 1) total_mac += mac_count;
    @(posedge clk);
    #1 check(!busy, "idle after done");
  endtask

  initial begin
    real w[];
    logic [15:0] wq[];
    real inv_s;
    w = new[KDIM];
    inv_s = 1.0 / 7.0;
    for (int b = 0; b < BATCH; b++)
      for (int k = 0; k < KDIM; k++) A[b][k] = rand_fp16(12, 16);
    for (int m = 0; m < MDIM; m++) begin
      for (int k = 0; k < KDIM; k++) w[k] = real'(int'($urandom % 1401) - 700) / 700.0;
      nm_prune_quant(w, 2, 4, inv_s, wq);
      for (int k = 0; k < KDIM; k++) begin
        W[k][m] = wq[k];
        if (wq[k][14:0] != 0) nz_total++;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int bt = 0; bt < BATCH / R; bt++)
      for (int mt = 0; mt < MDIM / C; mt++) begin
        for (int kt = 0; kt < KDIM / KM; kt++) run(bt, mt, kt);
        // read and check the finished output tile
        for (int r = 0; r < R; r++) begin
          @(negedge clk);
          out_rd_en = 1; out_rd_addr = ($clog2(R))'(r);
          @(posedge clk);
          #1;
          for (int c = 0; c < C; c++) begin
            fp32_t acc;
            acc = 32'd0;
            for (int k = 0; k < KDIM; k++)
              if (W[k][mt*C + c][14:0] != 0)
                acc = real_to_fp32(fp32_to_real(acc) +
                                   fp16_to_real(A[bt*R + r][k]) * fp16_to_real(W[k][mt*C + c]));
            check(out_rd_data[c] == acc, "layer output element");
            if (out_rd_data[c] != acc && failures < 5)
              $display("  C[%0d][%0d] = %h, expected %h", bt*R + r, mt*C + c, out_rd_data[c], acc);
          end
        end
        @(negedge clk);
        out_rd_en = 0;
      end
    check(total_mac == nz_total * BATCH, "MACs performed = nonzero weights x batch");
    check(2 * total_mac <= longint'(BATCH) * KDIM * MDIM, "2:4 skips at least half");
    $display("layer: %0d of %0d MACs performed", total_mac, longint'(BATCH) * KDIM * MDIM);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
