// pe: zero-skipping processing element of the output-stationary systolic
// array.
//
// Each cycle the PE latches the activation arriving from its left neighbour
// and the weight arriving from its upper neighbour into input registers. In
// the next cycle a comparator checks the registered weight: if it is nonzero
// (and both operands are valid) the PE multiplies the operands and adds the
// product into its partial-sum register; if it is zero the multiplier and
// adder are bypassed and the partial sum keeps its value. In both cases the
// registered operands are what the PE passes on to its right and lower
// neighbours, so an operand moves one PE per cycle. Because pruned weights
// are stored as zeros in place, this comparator is all the PE needs to skip
// the work of any N:M pattern; it holds no sparsity metadata and no integer
// or scaling logic.
//
// Interface: a_in/w_in are the operands from the left/top, a_out/w_out the
// registered copies for the right/bottom neighbour (one cycle later). clear
// zeroes the partial sum (start of a new output tile); psum is the partial
// sum register. mac_fire and skip report, for the operands held in the input
// registers this cycle, whether a MAC is performed or skipped.
//
// From the paper: input registers, zero comparator, bypass of the multiplier,
// partial-sum register, operand forwarding. This design's choices: FP16
// operands with an FP32 partial sum, a valid flag travelling with each
// operand, a synchronous clear, and an active-low synchronous reset.
module pe
  import nm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  op16_t a_in,
  input  op16_t w_in,
  output op16_t a_out,
  output op16_t w_out,
  output fp32_t psum,
  output logic  mac_fire,
  output logic  skip
);

  op16_t a_q, w_q;           // input registers
  fp32_t acc_q;              // partial-sum register
  fp32_t prod, sum;
  logic  both_vld, w_zero;

  // input registers: latch the incoming operands every cycle
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q <= '0;
      w_q <= '0;
    end else begin
      a_q <= a_in;
      w_q <= w_in;
    end
  end

  // comparator on the registered weight
  always_comb begin
    both_vld = a_q.vld && w_q.vld;
    w_zero   = fp16_is_zero(w_q.val);
    mac_fire = both_vld && !w_zero;
    skip     = both_vld && w_zero;
  end

  fp_mul u_mul (.a(a_q.val), .b(w_q.val), .p(prod));
  fp_add u_add (.a(acc_q),   .b(prod),    .s(sum));

  // partial-sum register: updated only when a MAC is performed
  always_ff @(posedge clk) begin
    if (!rst_n || clear) acc_q <= FP32_ZERO;
    else if (mac_fire)   acc_q <= sum;
  end

  assign a_out = a_q;
  assign w_out = w_q;
  assign psum  = acc_q;

endmodule
