// mem_ctrl: the accelerator's memory controller.
//
// It moves data between CPU (system) memory and the accelerator:
//   * LOAD_W (once, at boot): cmd_len rows of 256 INT8 weights from cmd_addr
//     into the global weight buffer, eight 256-bit reads per row.
//   * LOAD_X (per epoch): cmd_len instructions of 13 INT8 features from
//     cmd_addr into the global input buffer. In memory every instruction takes
//     a 16-byte slot (13 feature bytes, 3 bytes ignored), two per 256-bit read.
//   * predictions: whenever the tiles emit a result, one per active tile, it is
//     written as a 32-bit word {15'b0, class, value[15:0]} to
//     res_base + 4 * instruction index, with byte strobes on the 256-bit bus.
// res_busy is high while results wait to be written; the tile control does not
// emit new results until it is low.
//
// The paper names the memory controller and states that an epoch's features
// are loaded from CPU memory into the global input buffer and the weights once
// at boot into the global weight buffer. The bus width, the one-read-in-flight
// read protocol, the memory layouts and the result format are this design's
// choices.
//
// Read channel: a request (rd_req_valid/rd_req_ready, byte address) is
// answered by exactly one rd_resp_valid beat, in order, after any latency.
// Write channel: mem_wr is taken when mem_wr_valid and mem_wr_ready are high.
//
// Lint notes: the 3 padding bytes of each 16-byte feature slot (bits 104..127
// and 232..255 of a read beat) are ignored by design; sel is an int index that
// only needs clog2(NT) bits; the two low bits of the result byte address are
// always zero (32-bit words).
module mem_ctrl
  import ns_pkg::*;
#(
  parameter int NT    = 1,
  parameter int GI_AW = 17,
  parameter int GW_AW = 13
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                cmd_valid,
  input  logic                cmd_is_w,      // 1: weights, 0: features
  input  logic [MEM_AW-1:0]   cmd_addr,
  input  logic [31:0]         cmd_len,
  output logic                cmd_ready,
  output logic                cmd_done,
  input  logic [MEM_AW-1:0]   res_base,
  // system memory read channel
  output logic                rd_req_valid,
  output logic [MEM_AW-1:0]   rd_req_addr,
  input  logic                rd_req_ready,
  input  logic                rd_resp_valid,
  input  logic [MEM_W-1:0]    rd_resp_data,
  // system memory write channel
  output logic                mem_wr_valid,
  output mem_wr_t             mem_wr,
  input  logic                mem_wr_ready,
  // global buffers
  output logic                gwb_we,
  output logic [GW_AW-1:0]    gwb_waddr,
  output logic [H*8-1:0]      gwb_wdata,
  output logic                gib_we,
  output logic [GI_AW-1:0]    gib_waddr,
  output logic [NFEAT*8-1:0]  gib_wdata,
  // predictions from the tiles
  input  logic                res_valid,
  input  logic [NT-1:0]       res_en,
  input  logic [31:0]         res_idx [NT],
  input  logic [NT-1:0]       res_cls,
  input  logic signed [15:0]  res_val [NT],
  output logic                res_busy
);
  localparam int BEATS = H * 8 / MEM_W;     // 8 reads per weight row

  typedef enum logic [2:0] {M_IDLE, M_REQ, M_RESP, M_WX0, M_WX1, M_WROW} mst_e;
  mst_e st;
  logic              is_w;
  logic [MEM_AW-1:0] base;
  logic [31:0]       len, item;          // rows or instructions
  logic [$clog2(BEATS)-1:0] beat;
  logic [H*8-1:0]    rowbuf;
  logic [MEM_W-1:0]  xbeat;

  assign cmd_ready = (st == M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; is_w <= 1'b0; base <= '0; len <= '0; item <= '0; beat <= '0;
      rowbuf <= '0; xbeat <= '0; cmd_done <= 1'b0;
      rd_req_valid <= 1'b0; rd_req_addr <= '0;
      gwb_we <= 1'b0; gwb_waddr <= '0; gwb_wdata <= '0;
      gib_we <= 1'b0; gib_waddr <= '0; gib_wdata <= '0;
    end else begin
      cmd_done <= 1'b0;
      gwb_we   <= 1'b0;
      gib_we   <= 1'b0;
      case (st)
        M_IDLE: if (cmd_valid) begin
          is_w <= cmd_is_w; base <= cmd_addr; len <= cmd_len; item <= '0; beat <= '0;
          if (cmd_len == '0) cmd_done <= 1'b1;
          else               st <= M_REQ;
        end
        M_REQ: begin
          rd_req_valid <= 1'b1;
          rd_req_addr  <= is_w ? base + MEM_AW'(item) * MEM_AW'(H) + MEM_AW'(beat) * MEM_AW'(MEM_W/8)
                               : base + MEM_AW'(item) * MEM_AW'(16);
          if (rd_req_valid && rd_req_ready) begin
            rd_req_valid <= 1'b0;
            st <= M_RESP;
          end
        end
        M_RESP: if (rd_resp_valid) begin
          if (is_w) begin
            rowbuf[beat*MEM_W +: MEM_W] <= rd_resp_data;
            beat <= beat + 1'b1;
            st   <= (int'(beat) == BEATS-1) ? M_WROW : M_REQ;
          end else begin
            xbeat <= rd_resp_data;
            st    <= M_WX0;
          end
        end
        M_WROW: begin
          gwb_we <= 1'b1; gwb_waddr <= GW_AW'(item); gwb_wdata <= rowbuf;
          item <= item + 1;
          if (item + 1 == len) begin st <= M_IDLE; cmd_done <= 1'b1; end
          else st <= M_REQ;
        end
        M_WX0: begin
          gib_we <= 1'b1; gib_waddr <= GI_AW'(item); gib_wdata <= xbeat[0 +: NFEAT*8];
          item <= item + 1;
          if (item + 1 == len) begin st <= M_IDLE; cmd_done <= 1'b1; end
          else st <= M_WX1;
        end
        M_WX1: begin
          gib_we <= 1'b1; gib_waddr <= GI_AW'(item); gib_wdata <= xbeat[128 +: NFEAT*8];
          item <= item + 1;
          if (item + 1 == len) begin st <= M_IDLE; cmd_done <= 1'b1; end
          else st <= M_REQ;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  // ---------------- prediction write-back ----------------
  logic [NT-1:0]      pend;
  logic [31:0]        p_idx [NT];
  logic [NT-1:0]      p_cls;
  logic signed [15:0] p_val [NT];
  int                 sel;
  logic [MEM_AW-1:0]  waddr;

  always_comb begin
    sel = 0;
    for (int k = NT-1; k >= 0; k--) if (pend[k]) sel = k;
    waddr = res_base + (MEM_AW'(p_idx[sel]) << 2);
    mem_wr.addr = {waddr[MEM_AW-1:5], 5'b0};
    mem_wr.data = '0;
    mem_wr.data[waddr[4:2]*32 +: 32] = {15'b0, p_cls[sel], p_val[sel]};
    mem_wr.strb = (MEM_W/8)'(4'hf) << (waddr[4:2] * 4);
  end
  assign mem_wr_valid = |pend;
  assign res_busy     = |pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; p_cls <= '0;
      for (int k = 0; k < NT; k++) begin p_idx[k] <= '0; p_val[k] <= '0; end
    end else begin
      if (mem_wr_valid && mem_wr_ready) pend[sel] <= 1'b0;
      if (res_valid) begin
        pend  <= res_en;
        p_cls <= res_cls;
        for (int k = 0; k < NT; k++) begin p_idx[k] <= res_idx[k]; p_val[k] <= res_val[k]; end
      end
    end
  end

  // results only arrive when the previous ones are written
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> !res_busy);
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> (st == M_RESP));
endmodule
