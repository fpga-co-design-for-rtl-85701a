// nm_pkg: types and constants shared by the zero-skipping systolic GEMM
// accelerator.
//
// The accelerator multiplies FP16 activations by FP16 weights that the host
// has already dequantized from N:M-pruned INT4 values; pruned weights arrive
// as zeros in place, so no sparsity metadata exists in hardware. Products and
// partial sums are kept in IEEE-754 binary32. The number formats follow the
// text (FP16 activations, dequantized floating-point weights); binary32
// accumulation is this design's choice.
package nm_pkg;

  typedef logic [15:0] fp16_t;   // IEEE-754 binary16
  typedef logic [31:0] fp32_t;   // IEEE-754 binary32

  localparam fp32_t FP32_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_QNAN = 32'h7FC0_0000;

  // An FP16 value is zero when its exponent and fraction are all zero,
  // whatever its sign bit: this is the comparator of the zero-skipping PE.
  function automatic logic fp16_is_zero(fp16_t v);
    return (v & 16'h7FFF) == 16'h0000;
  endfunction

  // An operand travelling through the grid: value plus a valid flag that
  // marks the cycles carrying real data (the skewed edges carry bubbles).
  typedef struct packed {
    logic  vld;
    fp16_t val;
  } op16_t;

  // Phases of one tile run in the controller.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,  // waiting for start
    ST_STREAM = 3'd1,  // reading buffers and pushing the operand FIFOs
    ST_FLUSH  = 3'd2,  // last operands travelling through the grid
    ST_DRAIN  = 3'd3,  // copying partial sums into the Output Buffer
    ST_DONE   = 3'd4   // one-cycle completion pulse
  } ctrl_state_e;

endpackage
