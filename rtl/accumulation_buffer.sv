// accumulation_buffer: the 256 partial-sum registers behind the vector MAC.
//
// On every valid product vector each register adds its INT16 product to its
// INT32 partial sum; a product tagged clr starts a new sum instead. A full
// vector-matrix product (and the sum of the input and recurrent products of
// an LSTM gate) thus builds up in place, and the post-processing unit reads
// the finished sums from acc. The existence of the accumulation buffers is the
// paper's; the INT32 width is this design's choice (256 products of two INT8
// values need at most 23 bits).
//
// Timing: a sum is updated one cycle after its product arrives; acc is a
// register output. Reset zeroes all sums.
module accumulation_buffer
  import ns_pkg::*;
#(
  parameter int N = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_clr,
  input  logic signed [15:0]  prod [N],
  output acc_t                acc [N]
);
  // one register per sum, each in its own generate scope
  for (genvar j = 0; j < N; j++) begin : g_sum
    acc_t q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        q <= '0;
      else if (in_valid) q <= (in_clr ? acc_t'(0) : q) + acc_t'(prod[j]);
    end
    assign acc[j] = q;
  end
endmodule
