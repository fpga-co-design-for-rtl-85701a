// nm_gemm_accel: output-stationary systolic-array accelerator for N:M-sparse,
// quantized weight matrices, computing one output tile C = A x W.
//
// A is a ROWS x k_len tile of FP16 activations (ROWS batch rows), W a
// k_len x COLS tile of FP16 weights that the host has dequantized from INT4
// (w = q * s^-1), with the pruned weights left as zeros in place. The host
// writes the tiles into the Matrix A Buffer and the Matrix B Weight Buffer,
// pulses start, waits for done and reads C (FP32) from the Output Buffer.
// Inside, the controller reads both buffers one K step per cycle and pushes
// the words into one Data FIFO per row and one Weight FIFO per column; the
// FIFOs are emptied with a one-cycle-per-lane skew into the left and top
// edges of the PE grid, where each PE skips the multiply-accumulate for zero
// weights. Larger matrices are computed tile by tile by the host; with
// accumulate set the partial sums of the previous run are kept, so K may be
// split over several runs.
//
// Host-side ports (where the platform's memory and control shell connect):
//   a_wr_*   word k = A[0..ROWS-1][k], lane r in bits [16r +: 16]
//   b_wr_*   word k = W[k][0..COLS-1], lane c in bits [16c +: 16]
//   out_rd_* word r = C[r][0..COLS-1] in FP32, lane c in bits [32c +: 32],
//            one-cycle read latency
//   start/k_len/accumulate, busy, done: run control
//   mac_count/skip_count: MACs performed / skipped for zero weights in the
//            last run (since the last clear)
// Buffers must not be written while busy. Latency from start to done is
// k_len + 2*ROWS + COLS + 2 cycles for any sparsity pattern: skipping saves
// arithmetic work, not cycles.
//
// The structure (buffers, FIFOs, PE grid, output buffer, zero-skipping PE)
// follows the paper. Array and buffer sizes, number formats, port protocol
// and the accumulate option are this design's choices.
module nm_gemm_accel
  import nm_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned KMAX = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // run control
  input  logic                      start,
  input  logic [$clog2(KMAX+1)-1:0] k_len,
  input  logic                      accumulate,
  output logic                      busy,
  output logic                      done,
  // Matrix A Buffer write port
  input  logic                      a_wr_en,
  input  logic [$clog2(KMAX)-1:0]   a_wr_addr,
  input  logic [ROWS-1:0][15:0]     a_wr_data,
  // Matrix B Weight Buffer write port
  input  logic                      b_wr_en,
  input  logic [$clog2(KMAX)-1:0]   b_wr_addr,
  input  logic [COLS-1:0][15:0]     b_wr_data,
  // Output Buffer read port
  input  logic                      out_rd_en,
  input  logic [$clog2(ROWS)-1:0]   out_rd_addr,
  output logic [COLS-1:0][31:0]     out_rd_data,
  // work counters
  output logic [31:0]               mac_count,
  output logic [31:0]               skip_count
);

  localparam int unsigned FIFO_DEPTH = ((ROWS > COLS) ? ROWS : COLS) + 1;

  ctrl_state_e                state;
  logic                       clear_acc, buf_re, fifo_push, out_we;
  logic [$clog2(KMAX)-1:0]    buf_raddr;
  logic [$clog2(ROWS)-1:0]    out_waddr;
  logic                       a_pop [ROWS];
  logic                       w_pop [COLS];
  logic [ROWS-1:0][15:0]      a_word;
  logic [COLS-1:0][15:0]      b_word;
  op16_t                      a_left [ROWS];
  op16_t                      w_top  [COLS];
  fp32_t                      psum   [ROWS][COLS];
  logic [COLS-1:0][31:0]      out_row;

  gemm_controller #(.ROWS(ROWS), .COLS(COLS), .KMAX(KMAX)) u_ctrl (
    .clk, .rst_n, .start, .k_len, .accumulate, .busy, .done,
    .state, .clear_acc, .buf_re, .buf_raddr, .fifo_push,
    .a_pop, .w_pop, .out_we, .out_waddr
  );

  // Matrix A Buffer and Matrix B Weight Buffer
  tile_buffer #(.WIDTH(16*ROWS), .DEPTH(KMAX)) u_a_buf (
    .clk, .we(a_wr_en), .waddr(a_wr_addr), .wdata(a_wr_data),
    .re(buf_re), .raddr(buf_raddr), .rdata(a_word)
  );
  tile_buffer #(.WIDTH(16*COLS), .DEPTH(KMAX)) u_b_buf (
    .clk, .we(b_wr_en), .waddr(b_wr_addr), .wdata(b_wr_data),
    .re(buf_re), .raddr(buf_raddr), .rdata(b_word)
  );

  // Data FIFOs (one per row) and Weight FIFOs (one per column)
  for (genvar r = 0; r < ROWS; r++) begin : g_dfifo
    fp16_t dout;
    operand_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(fifo_push), .din(a_word[r]), .pop(a_pop[r]),
      .dout(dout), .empty(), .full(), .count()
    );
    assign a_left[r] = '{vld: a_pop[r], val: dout};
  end
  for (genvar c = 0; c < COLS; c++) begin : g_wfifo
    fp16_t dout;
    operand_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(fifo_push), .din(b_word[c]), .pop(w_pop[c]),
      .dout(dout), .empty(), .full(), .count()
    );
    assign w_top[c] = '{vld: w_pop[c], val: dout};
  end

  pe_array #(.ROWS(ROWS), .COLS(COLS), .CNT_W(32)) u_grid (
    .clk, .rst_n, .clear(clear_acc), .a_left, .w_top, .psum,
    .mac_count, .skip_count
  );

  // Output Buffer: row r of the partial sums is written during drain cycle r
  always_comb begin
    out_row = '0;
    for (int r = 0; r < ROWS; r++)
      if (out_waddr == ($clog2(ROWS))'(r))
        for (int c = 0; c < COLS; c++) out_row[c] = psum[r][c];
  end

  tile_buffer #(.WIDTH(32*COLS), .DEPTH(ROWS)) u_out_buf (
    .clk, .we(out_we), .waddr(out_waddr), .wdata(out_row),
    .re(out_rd_en), .raddr(out_rd_addr), .rdata(out_rd_data)
  );

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         busy |-> !(a_wr_en || b_wr_en))
    else $error("nm_gemm_accel: tile buffer written during a run");

endmodule
