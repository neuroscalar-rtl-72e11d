// neutrino: the NeuroScalar inference accelerator.
//
// It runs the cycle-prediction model (input projection 13 -> 256, two stacked
// LSTM layers of 256, a two-way latency-regime classifier and two regressors)
// over an epoch of instruction features entirely from on-chip memory:
//   1. At boot, LOAD_W copies the INT8 weights from CPU memory into the 1.25MB
//      global weight buffer.
//   2. Per epoch, LOAD_X copies the quantised features of n_instr instructions
//      into the 1.25MB global input buffer.
//   3. start runs the static schedule of tile_control on NT tiles; every
//      predicted instruction gets a 32-bit result word in CPU memory at
//      res_base + 4 * index: bit 16 is the class (1 = more than 10 cycles),
//      bits 15:0 the predicted log(1 + cycles) with FRAC_A fraction bits.
// Once the features are loaded, the cycle count of step 3 depends only on
// n_instr (plus any wait for result writes), so the run is deterministic.
//
// Follows the paper: the blocks and sizes of the accelerator diagram (memory
// controller, tile control, 1.25MB global input and weight buffers, 16KB tile
// input and 128KB tile weight buffers, 16x16 INT8 vector MAC, accumulation
// buffers, bias/ReLU/sigmoid/tanh), the single-tile main configuration with
// NT = 8 as the scaled-out option, tiles sharing the global buffers.
// This design's choices are listed in the sub-blocks; the host must store the
// weights in the row layout of ns_pkg and the features as 16-byte slots.
module neutrino
  import ns_pkg::*;
#(
  parameter int NT     = 1,
  parameter int SEQ_N  = 576,
  parameter int SEQ_R  = 64,
  parameter int GIB_BYTES = 1310720,
  parameter int GWB_BYTES = 1310720
) (
  input  logic                clk,
  input  logic                rst_n,
  // load commands
  input  logic                cmd_valid,
  input  logic                cmd_is_w,
  input  logic [MEM_AW-1:0]   cmd_addr,
  input  logic [31:0]         cmd_len,
  output logic                cmd_ready,
  output logic                cmd_done,
  // inference
  input  logic                start,
  input  logic [31:0]         n_instr,
  input  logic [MEM_AW-1:0]   res_base,
  output logic                busy,
  output logic                done,
  // system memory
  output logic                rd_req_valid,
  output logic [MEM_AW-1:0]   rd_req_addr,
  input  logic                rd_req_ready,
  input  logic                rd_resp_valid,
  input  logic [MEM_W-1:0]    rd_resp_data,
  output logic                mem_wr_valid,
  output mem_wr_t             mem_wr,
  input  logic                mem_wr_ready,
  // activity counters
  output logic [31:0]         n_mac_ops,
  output logic [31:0]         n_weight_waits,
  output logic [31:0]         n_res_stalls
);
  localparam int GI_WORDS = GIB_BYTES / NFEAT;
  localparam int GI_AW    = $clog2(GI_WORDS);
  localparam int GW_ROWS  = GWB_BYTES / H;
  localparam int GW_AW    = $clog2(GW_ROWS);
  localparam int TIB_AW   = 6;

  // global buffers
  logic                gib_we, gib_re;
  logic [GI_AW-1:0]    gib_waddr, gib_raddr;
  logic [NFEAT*8-1:0]  gib_wdata, gib_rdata;
  logic                gwb_we, gwb_re;
  logic [GW_AW-1:0]    gwb_waddr, gwb_raddr;
  logic [H*8-1:0]      gwb_wdata, gwb_rdata;

  // tile control broadcast
  logic [NT-1:0]       tib_x_we;
  logic                twb_we, twb_whalf, bias_we, bias_whalf;
  logic [7:0]          twb_wrow;
  logic                tib_a_re, twb_re, twb_rhalf, mac_valid, mac_clr;
  logic [TIB_AW-1:0]   tib_a_row;
  logic [7:0]          tib_a_idx, twb_rrow;
  logic                pp_start, pp_layer, pp_bias_half;
  pp_op_e              pp_op;
  logic [TIB_AW-1:0]   pp_dst;
  logic [NT-1:0]       pp_done, pp_busy, t_res_valid, t_res_cls, res_en;
  logic signed [15:0]  t_res_val [NT];
  logic [31:0]         res_idx [NT];
  logic                res_busy;
  logic                ctl_busy;

  global_input_buffer #(.BYTES(GIB_BYTES), .NFEAT(NFEAT), .WORDS(GI_WORDS), .AW(GI_AW)) u_gib (
    .clk, .we(gib_we), .waddr(gib_waddr), .wdata(gib_wdata),
    .re(gib_re), .raddr(gib_raddr), .rdata(gib_rdata)
  );

  global_weight_buffer #(.BYTES(GWB_BYTES), .ROW_BITS(H*8), .ROWS(GW_ROWS), .AW(GW_AW)) u_gwb (
    .clk, .we(gwb_we), .waddr(gwb_waddr), .wdata(gwb_wdata),
    .re(gwb_re), .raddr(gwb_raddr), .rdata(gwb_rdata)
  );

  mem_ctrl #(.NT(NT), .GI_AW(GI_AW), .GW_AW(GW_AW)) u_mc (
    .clk, .rst_n,
    .cmd_valid, .cmd_is_w, .cmd_addr, .cmd_len, .cmd_ready, .cmd_done, .res_base,
    .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_resp_valid, .rd_resp_data,
    .mem_wr_valid, .mem_wr, .mem_wr_ready,
    .gwb_we, .gwb_waddr, .gwb_wdata, .gib_we, .gib_waddr, .gib_wdata,
    .res_valid(t_res_valid[0]), .res_en, .res_idx, .res_cls(t_res_cls),
    .res_val(t_res_val), .res_busy
  );

  tile_control #(.NT(NT), .SEQ_N(SEQ_N), .SEQ_R(SEQ_R), .GI_AW(GI_AW), .GW_AW(GW_AW),
                 .TIB_AW(TIB_AW)) u_ctl (
    .clk, .rst_n, .start, .n_instr, .busy(ctl_busy), .done,
    .gib_re, .gib_raddr, .tib_x_we,
    .gwb_re, .gwb_raddr, .twb_we, .twb_whalf, .twb_wrow, .bias_we, .bias_whalf,
    .tib_a_re, .tib_a_row, .tib_a_idx, .twb_re, .twb_rhalf, .twb_rrow,
    .mac_valid, .mac_clr,
    .pp_start, .pp_op, .pp_layer, .pp_dst, .pp_bias_half, .pp_done(pp_done[0]),
    .res_en, .res_idx, .res_busy,
    .n_mac_ops, .n_weight_waits, .n_res_stalls
  );

  for (genvar k = 0; k < NT; k++) begin : g_tile
    neutrino_tile #(.TIB_AW(TIB_AW)) u_tile (
      .clk, .rst_n,
      .x_we(tib_x_we[k]), .x_data(gib_rdata),
      .gw_data(gwb_rdata), .twb_we, .twb_whalf, .twb_wrow, .bias_we, .bias_whalf,
      .tib_a_re, .tib_a_row, .tib_a_idx, .twb_re, .twb_rhalf, .twb_rrow,
      .mac_valid, .mac_clr,
      .pp_start, .pp_op, .pp_layer, .pp_dst, .pp_bias_half,
      .pp_done(pp_done[k]), .pp_busy(pp_busy[k]),
      .res_valid(t_res_valid[k]), .res_cls(t_res_cls[k]), .res_val(t_res_val[k])
    );
  end

  // the tiles run in lockstep
  // busy until the schedule has ended and every tile's post-processing is idle
  assign busy = ctl_busy || (|pp_busy);

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (pp_done == '0) || (pp_done == '1));
  // loads and inference do not overlap
  a_no_load_during_run: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(gib_we || gwb_we));
endmodule
