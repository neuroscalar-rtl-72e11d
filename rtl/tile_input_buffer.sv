// tile_input_buffer: a tile's 16KB local activation buffer.
//
// It holds 64 rows of 256 INT8 activations: the current instruction's
// features, the projected input, the hidden state of each LSTM layer, the four
// gate vectors and the classifier's hidden layer. It feeds the vector MAC one
// element per cycle (port A broadcasts activation[idx] of a row to all 256
// multipliers) and gives whole rows to the post-processing unit (port B),
// whose results come back through the single write port; this is the loop
// from the activation units back to the input buffer in the accelerator's
// block diagram.
//
// The 16KB size is the paper's; rows of 256 bytes and the two read ports are
// this design's choice.
//
// Timing: both reads are registered, data one cycle after the enable. A write
// and a read of the same row in one cycle return the old row.
module tile_input_buffer #(
  parameter int BYTES    = 16384,
  parameter int ROW_BITS = 2048,
  parameter int ROWS     = BYTES * 8 / ROW_BITS,
  parameter int AW       = $clog2(ROWS),
  parameter int IW       = $clog2(ROW_BITS / 8)
) (
  input  logic                 clk,
  // write port
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [ROW_BITS-1:0]  wdata,
  // port A: one element to the vector MAC
  input  logic                 a_re,
  input  logic [AW-1:0]        a_row,
  input  logic [IW-1:0]        a_idx,
  output logic signed [7:0]    a_data,
  // port B: one row to the post-processing unit
  input  logic                 b_re,
  input  logic [AW-1:0]        b_row,
  output logic [ROW_BITS-1:0]  b_data
);
  logic [ROW_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr] <= wdata;
    if (a_re) a_data <= mem[a_row][a_idx*8 +: 8];
    if (b_re) b_data <= mem[b_row];
  end
endmodule
