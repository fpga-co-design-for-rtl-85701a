// tile_buffer: on-chip tile memory with one write port and one read port.
//
// Used three times in the accelerator: as the Matrix A Buffer (one word per
// K step holding that K column of the A tile, lane r = batch row r), as the
// Matrix B Weight Buffer (one word per K step holding that K row of the
// dequantized weight tile, lane c = output column c), and as the Output
// Buffer (one word per array row holding that row of FP32 results). It is a
// plain array with a registered read, so FPGA tools map it to block RAM.
//
// Interface: we/waddr/wdata write in the cycle they are given; re/raddr
// return rdata one cycle later (rdata holds its value when re is low). A read
// and a write to the same address in one cycle return the old word. The
// contents are not reset. The paper names the three buffers; their word
// organisation and the one-cycle read are this design's choices.
module tile_buffer #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
