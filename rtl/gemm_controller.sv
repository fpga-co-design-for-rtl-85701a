// gemm_controller: sequences one output tile through the accelerator.
//
// On start (accepted only when idle) the controller runs four phases:
//   STREAM  k_len cycles: reads K step k = 0..k_len-1 from the Matrix A Buffer
//           and the Matrix B Weight Buffer (both addressed by k). One cycle
//           later the words arrive and are pushed into every Data FIFO and
//           Weight FIFO at once (fifo_push).
//   (skew)  one cycle after a push, Data FIFO r pops r cycles late and Weight
//           FIFO c pops c cycles late (a_pop / w_pop, taken from a shift
//           register of the push strobe), so A[r][k] and W[k][c] meet in
//           PE (r,c).
//   FLUSH   ROWS + COLS + 1 cycles, the time the last operand pair needs to
//           reach PE (ROWS-1, COLS-1) and update its partial sum.
//   DRAIN   ROWS cycles: row r of partial sums is written to Output Buffer
//           address r (out_we / out_waddr).
// then pulses done for one cycle. clear_acc is raised in the first STREAM
// cycle unless accumulate was set with start; leaving the partial sums in
// place lets a K dimension longer than the buffers be summed over several
// runs.
//
// Timing: done comes k_len + 2*ROWS + COLS + 2 cycles after the start cycle.
// The paper describes the staging, streaming and output collection; the
// phase structure, the skew by FIFO pop times, the accumulate flag and all
// cycle counts are this design's.
module gemm_controller
  import nm_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned KMAX = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(KMAX+1)-1:0] k_len,
  input  logic                      accumulate,
  output logic                      busy,
  output logic                      done,
  output ctrl_state_e               state,
  output logic                      clear_acc,
  output logic                      buf_re,
  output logic [$clog2(KMAX)-1:0]   buf_raddr,
  output logic                      fifo_push,
  output logic                      a_pop [ROWS],
  output logic                      w_pop [COLS],
  output logic                      out_we,
  output logic [$clog2(ROWS)-1:0]   out_waddr
);

  localparam int unsigned SKEW   = (ROWS > COLS) ? ROWS : COLS;
  localparam int unsigned FLUSH  = ROWS + COLS + 1;
  localparam int unsigned CW     = $clog2(KMAX + FLUSH + ROWS + 1);

  ctrl_state_e             st;
  logic [CW-1:0]           cnt;
  logic [$clog2(KMAX+1)-1:0] k_q;
  logic                    clr_q;
  logic [SKEW-1:0]         feed_sr;   // feed_sr[i]: lane i pops this cycle

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st    <= ST_IDLE;
      cnt   <= '0;
      k_q   <= '0;
      clr_q <= 1'b0;
    end else begin
      clr_q <= 1'b0;
      unique case (st)
        ST_IDLE: if (start) begin
          k_q   <= k_len;
          clr_q <= !accumulate;
          cnt   <= '0;
          st    <= (k_len == '0) ? ST_FLUSH : ST_STREAM;
        end
        ST_STREAM: begin
          if (cnt == CW'(k_q - 1'b1)) begin
            cnt <= '0;
            st  <= ST_FLUSH;
          end else cnt <= cnt + 1'b1;
        end
        ST_FLUSH: begin
          if (cnt == CW'(FLUSH - 1)) begin
            cnt <= '0;
            st  <= ST_DRAIN;
          end else cnt <= cnt + 1'b1;
        end
        ST_DRAIN: begin
          if (cnt == CW'(ROWS - 1)) begin
            cnt <= '0;
            st  <= ST_DONE;
          end else cnt <= cnt + 1'b1;
        end
        ST_DONE: st <= ST_IDLE;
        default: st <= ST_IDLE;
      endcase
    end
  end

  // buffer read strobe -> push one cycle later -> lane pops after the skew
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fifo_push <= 1'b0;
      feed_sr   <= '0;
    end else begin
      fifo_push <= buf_re;
      feed_sr   <= {feed_sr[SKEW-2:0], fifo_push};
    end
  end

  always_comb begin
    buf_re    = (st == ST_STREAM);
    buf_raddr = ($clog2(KMAX))'(cnt);
    out_we    = (st == ST_DRAIN);
    out_waddr = ($clog2(ROWS))'(cnt);
    done      = (st == ST_DONE);
    busy      = (st != ST_IDLE);
    state     = st;
    clear_acc = clr_q;
    for (int r = 0; r < ROWS; r++) a_pop[r] = feed_sr[r];
    for (int c = 0; c < COLS; c++) w_pop[c] = feed_sr[c];
  end

  a_k_len: assert property (@(posedge clk) disable iff (!rst_n)
                            (start && st == ST_IDLE) |-> (k_len <= ($clog2(KMAX+1))'(KMAX)))
    else $error("gemm_controller: k_len above KMAX");

endmodule
