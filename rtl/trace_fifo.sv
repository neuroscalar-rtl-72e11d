// trace_fifo: the on-chip buffer of the trace collector.
//
// A synchronous first-in first-out queue of DEPTH entries of WIDTH bits. In the
// collector each entry holds the records of five retired instructions, and the
// default depth of 512 entries is the paper's. The storage is a plain array
// (an SRAM in a real implementation); the read side is first-word-fall-through:
// rd_data shows the oldest entry whenever empty is low, and rd_en pops it.
//
// Interface: wr_en/wr_data push (ignored when full), rd_en pops (ignored when
// empty); full, empty and count are registered state. A push and a pop may
// happen in the same cycle. Reset empties the queue; the array is not cleared.
module trace_fifo #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 1000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
