// vector_mac: the accelerator's 256-wide INT8 vector engine, 16 lanes of 16
// multipliers.
//
// Each cycle it multiplies one broadcast activation a (element k of the input
// vector) by a row of 256 weights w[0..255] (row k of the weight matrix) and
// hands the 256 INT16 products to the accumulation buffer. A (1,256) x
// (256,256) vector-matrix product therefore takes 256 cycles with every
// multiplier busy, which is the schedule the paper describes for the LSTM gate
// products. The lane arrangement (16 x 16), the INT8 arithmetic and the 256
// cycles per product are the paper's; the broadcast-activation dataflow and
// the single register stage are this design's choice.
//
// Timing: products and the in_clr/in_valid tags appear one cycle after the
// inputs.
module vector_mac
  import ns_pkg::*;
#(
  parameter int NLANE  = 16,            // lanes
  parameter int LANE_N = 16             // multipliers per lane
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_clr,     // first product of a sum
  input  logic signed [7:0]            a,
  input  logic [NLANE*LANE_N*8-1:0]    w,          // element j at bits 8j+:8
  output logic                         out_valid,
  output logic                         out_clr,
  output logic signed [15:0]           prod [NLANE*LANE_N]
);
  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    for (genvar m = 0; m < LANE_N; m++) begin : g_mul
      localparam int J = l*LANE_N + m;
      logic signed [15:0] p;
      always_ff @(posedge clk) begin
        if (in_valid) p <= a * $signed(w[J*8 +: 8]);
      end
      assign prod[J] = p;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_clr   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_clr   <= in_clr;
    end
  end
endmodule
