// operand_fifo: synchronous FIFO carrying one operand lane into the PE grid.
//
// The accelerator has one of these per array row (the Data FIFOs, holding a
// row of the A tile) and one per array column (the Weight FIFOs, holding a
// column of the W tile). All lanes are filled in the same cycles from the
// buffers; lane i is then emptied i cycles later than lane 0, which turns the
// buffers' parallel words into the skewed streams the systolic array needs.
// A FIFO per lane is what the paper's dataflow names; using them to create the
// skew is this design's choice.
//
// Interface: push/din write, pop/dout read. dout shows the oldest entry
// (first-word fall-through) whenever empty is low. A push and a pop in the
// same cycle are both served. Pushing when full or popping when empty is an
// error, caught by assertions. count is the occupancy. Active-low synchronous
// reset empties the FIFO.
module operand_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("operand_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("operand_fifo: pop while empty");

endmodule
