// neutrino_tile: one compute tile of the Neutrino accelerator.
//
// A tile is the datapath of the accelerator's block diagram: the 16KB tile
// input buffer, the 128KB tile weight buffer, the 256-wide INT8 vector MAC
// (16 lanes x 16), the accumulation buffer and the post-processing unit
// (bias, ReLU, sigmoid, tanh, cell update, head selection), with the loop from
// the post-processing unit back into the input buffer. It has no controller
// of its own: tile_control drives every tile with the same signals, and the
// tiles differ only in the window they hold (their features and states).
//
// Per cycle of a matrix product, the tile input buffer broadcasts one
// activation and the tile weight buffer delivers one row of 256 weights; the
// products accumulate in place. Features arrive from the global input buffer
// (x_we, zero-extended into row 0) and weight and bias rows from the global
// weight buffer (twb_we, bias_we).
//
// The composition is the paper's; the port-level split is this design's.
module neutrino_tile
  import ns_pkg::*;
#(
  parameter int TIB_AW = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  // feature load
  input  logic                x_we,
  input  logic [NFEAT*8-1:0]  x_data,
  // weight staging
  input  logic [H*8-1:0]      gw_data,
  input  logic                twb_we,
  input  logic                twb_whalf,
  input  logic [7:0]          twb_wrow,
  input  logic                bias_we,
  input  logic                bias_whalf,
  // MAC operand fetch
  input  logic                tib_a_re,
  input  logic [TIB_AW-1:0]   tib_a_row,
  input  logic [7:0]          tib_a_idx,
  input  logic                twb_re,
  input  logic                twb_rhalf,
  input  logic [7:0]          twb_rrow,
  input  logic                mac_valid,
  input  logic                mac_clr,
  // post-processing
  input  logic                pp_start,
  input  pp_op_e              pp_op,
  input  logic                pp_layer,
  input  logic [TIB_AW-1:0]   pp_dst,
  input  logic                pp_bias_half,
  output logic                pp_done,
  output logic                pp_busy,
  // prediction
  output logic                res_valid,
  output logic                res_cls,
  output logic signed [15:0]  res_val
);
  logic signed [7:0]  a_elem;
  logic [H*8-1:0]     w_row, b_row, pp_wdata;
  logic               pp_re, pp_we;
  logic [TIB_AW-1:0]  pp_rrow, pp_wrow;
  logic               tib_we;
  logic [TIB_AW-1:0]  tib_waddr;
  logic [H*8-1:0]     tib_wdata;
  logic               p_valid, p_clr;
  logic signed [15:0] prod [H];
  acc_t               acc [H];

  // feature loads and post-processing results share the write port; the
  // schedule never issues both in one cycle
  always_comb begin
    tib_we    = x_we || pp_we;
    tib_waddr = x_we ? TIB_AW'(TIB_ROW_X) : pp_wrow;
    tib_wdata = x_we ? (H*8)'(x_data) : pp_wdata;
  end

  tile_input_buffer #(.ROW_BITS(H*8)) u_tib (
    .clk, .we(tib_we), .waddr(tib_waddr), .wdata(tib_wdata),
    .a_re(tib_a_re), .a_row(tib_a_row), .a_idx(tib_a_idx), .a_data(a_elem),
    .b_re(pp_re), .b_row(pp_rrow), .b_data(b_row)
  );

  tile_weight_buffer #(.ROW_BITS(H*8)) u_twb (
    .clk, .we(twb_we), .whalf(twb_whalf), .wrow(twb_wrow), .wdata(gw_data),
    .re(twb_re), .rhalf(twb_rhalf), .rrow(twb_rrow), .rdata(w_row)
  );

  vector_mac u_mac (
    .clk, .rst_n, .in_valid(mac_valid), .in_clr(mac_clr), .a(a_elem), .w(w_row),
    .out_valid(p_valid), .out_clr(p_clr), .prod(prod)
  );

  accumulation_buffer #(.N(H)) u_acc (
    .clk, .rst_n, .in_valid(p_valid), .in_clr(p_clr), .prod(prod), .acc(acc)
  );

  post_proc_unit #(.N(H), .AW(TIB_AW)) u_ppu (
    .clk, .rst_n,
    .start(pp_start), .op(pp_op), .layer(pp_layer), .dst_row(pp_dst),
    .bias_half(pp_bias_half), .busy(pp_busy), .done(pp_done),
    .bias_we(bias_we), .bias_whalf(bias_whalf), .bias_wdata(gw_data),
    .acc(acc),
    .tib_re(pp_re), .tib_rrow(pp_rrow), .tib_rdata(b_row),
    .tib_we(pp_we), .tib_wrow(pp_wrow), .tib_wdata(pp_wdata),
    .res_valid(res_valid), .res_cls(res_cls), .res_val(res_val)
  );

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(x_we && pp_we));
endmodule
