// global_weight_buffer: the accelerator's 1.25MB on-chip SRAM holding every
// weight and bias of the model as INT8.
//
// It is organised as 5120 rows of 256 INT8 values (one row per input element
// of a weight matrix, the 256 outputs side by side), which matches the
// 256-wide vector engine; the model's 1.07M parameters occupy 4696 rows (the
// layout is in ns_pkg). It is written once at boot by the memory controller
// and afterwards only read: the tile control streams one row per cycle to the
// tile weight buffers of all tiles at once, so all tiles share it.
//
// The size (1.25MB), its loading at boot and its sharing among tiles are the
// paper's; the row organisation is this design's choice.
//
// Interface: one write port and one read port; rdata is valid one cycle after
// re. Contents are not reset.
module global_weight_buffer #(
  parameter int BYTES    = 1310720,       // 1.25MB
  parameter int ROW_BITS = 2048,          // 256 x INT8
  parameter int ROWS     = BYTES * 8 / ROW_BITS,
  parameter int AW       = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [ROW_BITS-1:0]  wdata,
  input  logic                 re,
  input  logic [AW-1:0]        raddr,
  output logic [ROW_BITS-1:0]  rdata
);
  logic [ROW_BITS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
