// tile_weight_buffer: a tile's 128KB local weight buffer.
//
// 512 rows of 256 INT8 weights, used as two halves of 256 rows. While the
// vector MAC reads one row per cycle from one half (one 256x256 matrix, 64KB),
// the tile control stages the next matrix from the global weight buffer into
// the other half, so weight staging hides behind computation.
//
// The 128KB size is the paper's; the split into two alternating halves is
// this design's choice.
//
// Interface: write port (we, whalf, wrow, wdata); read port (re, rhalf, rrow)
// with rdata one cycle after re. Contents are not reset.
module tile_weight_buffer #(
  parameter int BYTES    = 131072,
  parameter int ROW_BITS = 2048,
  parameter int ROWS     = BYTES * 8 / ROW_BITS,
  parameter int RW       = $clog2(ROWS / 2)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic                 whalf,
  input  logic [RW-1:0]        wrow,
  input  logic [ROW_BITS-1:0]  wdata,
  input  logic                 re,
  input  logic                 rhalf,
  input  logic [RW-1:0]        rrow,
  output logic [ROW_BITS-1:0]  rdata
);
  logic [ROW_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[{whalf, wrow}] <= wdata;
    if (re) rdata <= mem[{rhalf, rrow}];
  end
endmodule
