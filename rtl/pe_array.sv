// pe_array: the 2D grid of zero-skipping PEs, output stationary.
//
// ROWS x COLS PEs. Row r receives the activation stream a_left[r] (one row of
// the A tile, i.e. one batch row, one K step per cycle) at its left edge;
// column c receives the weight stream w_top[c] (one column of the W tile) at
// its top edge. Activations move right and weights move down one PE per cycle,
// and PE (r,c) accumulates C[r][c] = sum_k A[r][k] * W[k][c] in place. The
// streams must be skewed at the edges: row r and column c start r and c
// cycles after row 0 / column 0, so that A[r][k] and W[k][c] meet in PE (r,c).
// The activations leaving the right edge and the weights leaving the bottom
// edge are discarded.
//
// Interface: clear zeroes all partial sums; psum[r][c] is each PE's partial
// sum. mac_count and skip_count add up, since the last clear, the MACs
// performed and the MACs skipped for a zero weight over the whole grid; they
// show the work saved by the zero-skipping and are this design's addition.
// Timing: operand k entering row r / column c in cycle t reaches the input
// registers of PE (r,c) in cycle t+1+c (resp. t+1+r) and updates its partial
// sum at the end of that cycle.
//
// The grid and the direction of data movement follow the paper; the array
// size is not given there and ROWS = COLS = 16 is this design's choice.
module pe_array
  import nm_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  op16_t            a_left [ROWS],
  input  op16_t            w_top  [COLS],
  output fp32_t            psum   [ROWS][COLS],
  output logic [CNT_W-1:0] mac_count,
  output logic [CNT_W-1:0] skip_count
);

  // a_h[r][c] enters PE (r,c) from the left; a_h[r][COLS] leaves the grid
  op16_t a_h [ROWS][COLS+1];
  // w_v[r][c] enters PE (r,c) from the top; w_v[ROWS][c] leaves the grid
  op16_t w_v [ROWS+1][COLS];
  logic  fire   [ROWS][COLS];
  logic  skp    [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = a_left[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_col
    assign w_v[0][c] = w_top[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .clear    (clear),
        .a_in     (a_h[r][c]),
        .w_in     (w_v[r][c]),
        .a_out    (a_h[r][c+1]),
        .w_out    (w_v[r+1][c]),
        .psum     (psum[r][c]),
        .mac_fire (fire[r][c]),
        .skip     (skp[r][c])
      );
    end
  end

  // per-cycle totals of performed and skipped MACs
  logic [CNT_W-1:0] fire_now, skip_now;
  always_comb begin
    fire_now = '0;
    skip_now = '0;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        fire_now = fire_now + CNT_W'(fire[r][c]);
        skip_now = skip_now + CNT_W'(skp[r][c]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      mac_count  <= '0;
      skip_count <= '0;
    end else begin
      mac_count  <= mac_count + fire_now;
      skip_count <= skip_count + skip_now;
    end
  end

endmodule
