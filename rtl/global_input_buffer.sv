// global_input_buffer: the accelerator's 1.25MB on-chip SRAM that holds the
// feature trace of one epoch.
//
// Each word is one instruction's 13 INT8 features (104 bits); 1.25MB holds
// 100,824 such words, enough for a 100,000-instruction epoch. The memory
// controller fills it from CPU memory before inference; during inference the
// tile control reads one word per tile per instruction step. Because the whole
// epoch is on chip, inference never waits for DRAM.
//
// The size (1.25MB) is the paper's; the word format of 13 bytes per
// instruction is this design's choice (the paper gives 13 features and quotes
// about 1MB for an epoch after quantisation).
//
// Interface: one write port (we, waddr, wdata) and one read port (re, raddr)
// with the data in rdata one cycle after re. Contents are not reset.
module global_input_buffer #(
  parameter int BYTES = 1310720,          // 1.25MB
  parameter int NFEAT = 13,               // INT8 features per word
  parameter int WORDS = BYTES / NFEAT,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [NFEAT*8-1:0]   wdata,
  input  logic                 re,
  input  logic [AW-1:0]        raddr,
  output logic [NFEAT*8-1:0]   rdata
);
  logic [NFEAT*8-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
