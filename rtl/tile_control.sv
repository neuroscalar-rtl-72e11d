// tile_control: the static schedule of the Neutrino accelerator.
//
// The whole inference of an epoch is a fixed sequence of operations, so the
// controller is two counters walking the same program, not an instruction
// fetch unit. The epoch of n_instr instructions is cut into sliding windows of
// SEQ_N instructions with stride SEQ_R; each window predicts its central SEQ_R
// instructions (the first one predicted is at offset (SEQ_N - SEQ_R)/2). Tile k
// of NT processes windows k, k+NT, k+2NT, ...: all tiles run the same program
// in lockstep, so one controller drives them all and the global weight buffer
// broadcasts every weight row to all tiles.
//
// Program of one window: clear the hidden and cell state, then for each of the
// SEQ_N instructions (op numbers in brackets):
//   [0]      load the instruction's 13 features from the global input buffer
//   [1]      input projection, 13 -> 256, bias, no activation
//   [2..9]   layer 0: for gates i,f,g,o: W_ih*x then + W_hh*h, bias, sigmoid
//            (tanh for g)
//   [10]     layer 0 cell update
//   [11..19] layer 1, the same with layer 0's new hidden state as input
//   and for the central instructions only:
//   [20]     classifier FC 256 -> 64, bias, ReLU
//   [21..22] classifier FC 64 -> 2 and the two regressors 256 -> 1 summed in
//            one accumulation (outputs 0,1 and 2,3), then class/mask selection
// Each matrix product takes K cycles on the vector MAC (K = 13, 64 or 256
// input elements), three cycles of pipeline drain and then the
// post-processing unit.
//
// Weight staging: a second walker (the stager) runs ahead through the same
// program and copies the rows of the next matrix (and its bias row) from the
// global weight buffer into the free half of every tile weight buffer, one row
// per cycle. A half is freed when the matrix in it has been post-processed.
// Staging a 256-row matrix (257 cycles) is shorter than computing one (259
// cycles plus post-processing), so between 256-row products the MAC does not
// wait. It does wait after a short product (the 13-row projection, the 64-row
// classifier layer) or a cell update, because the stager can only start the
// matrix after next once a half is freed; n_weight_waits counts these cycles.
//
// Stall: before the heads' last step the controller waits while the memory
// controller is still writing the previous predictions (res_busy); this is the
// only data-dependent delay.
//
// What follows the paper: the static schedule without stalls for DRAM, the
// 256-cycle vector-matrix products, activations pipelined after the products,
// sliding windows with a centred target segment, two stacked LSTM layers, the
// two-layer classifier with ReLU, the short/long regressors and mask-based
// selection, tiles with different batches and shared global buffers. This
// design's choices: the program order, the two-half weight staging, the window
// stride equal to SEQ_R, windows that do not reach past the end of the epoch,
// the default SEQ_N (3 x the 192-entry ROB) and SEQ_R.
//
// Lint notes: cd and gd are the decoded descriptors of the compute and the
// staging walker; each walker uses only the fields it needs (the stager never
// reads the destination or post-processing fields, the compute walker never
// reads the weight addresses), so some descriptor bits are unused by design.
module tile_control
  import ns_pkg::*;
#(
  parameter int NT     = 1,        // tiles
  parameter int SEQ_N  = 576,      // window length
  parameter int SEQ_R  = 64,       // predicted segment length
  parameter int GI_AW  = 17,       // global input buffer address
  parameter int GW_AW  = 13,       // global weight buffer address
  parameter int TIB_AW = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [31:0]         n_instr,
  output logic                busy,
  output logic                done,
  // global input buffer read
  output logic                gib_re,
  output logic [GI_AW-1:0]    gib_raddr,
  output logic [NT-1:0]       tib_x_we,     // write the word read last cycle
  // global weight buffer read, staging into the tiles
  output logic                gwb_re,
  output logic [GW_AW-1:0]    gwb_raddr,
  output logic                twb_we,
  output logic                twb_whalf,
  output logic [7:0]          twb_wrow,
  output logic                bias_we,
  output logic                bias_whalf,
  // MAC operand fetch (all tiles)
  output logic                tib_a_re,
  output logic [TIB_AW-1:0]   tib_a_row,
  output logic [7:0]          tib_a_idx,
  output logic                twb_re,
  output logic                twb_rhalf,
  output logic [7:0]          twb_rrow,
  output logic                mac_valid,
  output logic                mac_clr,
  // post-processing (all tiles)
  output logic                pp_start,
  output pp_op_e              pp_op,
  output logic                pp_layer,
  output logic [TIB_AW-1:0]   pp_dst,
  output logic                pp_bias_half,
  input  logic                pp_done,
  // predictions
  output logic [NT-1:0]       res_en,       // tile k's window is real
  output logic [31:0]         res_idx [NT], // instruction index of the result
  input  logic                res_busy,
  // activity counters
  output logic [31:0]         n_mac_ops,
  output logic [31:0]         n_weight_waits,
  output logic [31:0]         n_res_stalls
);
  localparam int S_OFF  = (SEQ_N - SEQ_R) / 2;
  localparam int OP_CLR = 23;

  typedef enum logic [1:0] {K_LOADX, K_MAC, K_CELL, K_CLR} kind_e;

  typedef struct packed {
    kind_e               kind;
    logic [GW_AW-1:0]    wbase;
    logic [8:0]          k;
    logic [TIB_AW-1:0]   src;
    logic                clr;
    pp_op_e              post;
    logic [TIB_AW-1:0]   dst;
    logic                has_bias;
    logic [GW_AW-1:0]    bias;
    logic                layer;
  } opdesc_t;

  typedef struct packed {
    logic [4:0]  op;
    logic [31:0] t;
    logic [31:0] r;
  } pos_t;

  function automatic opdesc_t decode(input logic [4:0] op);
    opdesc_t d;
    int o, l, g;
    d = '0;
    o = int'(op);
    if (o == OP_CLR)      d.kind = K_CLR;
    else if (o == 0)      d.kind = K_LOADX;
    else if (o == 1) begin
      d.kind = K_MAC; d.wbase = GW_AW'(GW_PROJ); d.k = 9'(NFEAT);
      d.src = TIB_AW'(TIB_ROW_X); d.clr = 1'b1; d.post = PP_ID;
      d.dst = TIB_AW'(TIB_ROW_XT); d.has_bias = 1'b1; d.bias = GW_AW'(GW_PROJ_B);
    end else if (o == 10 || o == 19) begin
      d.kind = K_CELL; d.layer = (o == 19);
      d.dst = TIB_AW'(TIB_ROW_H0 + int'(o == 19));
    end else if (o < 19) begin
      l = (o < 10) ? 0 : 1;
      g = (o - 2 - 9*l) / 2;
      d.kind = K_MAC; d.k = 9'd256; d.layer = 1'(l);
      if (((o - 2 - 9*l) % 2) == 0) begin        // input product
        d.wbase = GW_AW'(gw_wih(l, g));
        d.src   = TIB_AW'((l == 0) ? TIB_ROW_XT : TIB_ROW_H0);
        d.clr   = 1'b1; d.post = PP_NONE;
      end else begin                              // recurrent product
        d.wbase = GW_AW'(gw_whh(l, g));
        d.src   = TIB_AW'(TIB_ROW_H0 + l);
        d.clr   = 1'b0; d.post = (g == 2) ? PP_TANH : PP_SIG;
        d.dst   = TIB_AW'(TIB_ROW_G + g);
        d.has_bias = 1'b1; d.bias = GW_AW'(gw_bias(l, g));
      end
    end else if (o == 20) begin
      d.kind = K_MAC; d.wbase = GW_AW'(GW_FC1); d.k = 9'd256;
      d.src = TIB_AW'(TIB_ROW_H1); d.clr = 1'b1; d.post = PP_RELU;
      d.dst = TIB_AW'(TIB_ROW_Z); d.has_bias = 1'b1; d.bias = GW_AW'(GW_FC1_B);
    end else if (o == 21) begin
      d.kind = K_MAC; d.wbase = GW_AW'(GW_FC2); d.k = 9'd64;
      d.src = TIB_AW'(TIB_ROW_Z); d.clr = 1'b1; d.post = PP_NONE;
    end else begin
      d.kind = K_MAC; d.wbase = GW_AW'(GW_REG); d.k = 9'd256;
      d.src = TIB_AW'(TIB_ROW_H1); d.clr = 1'b0; d.post = PP_EMIT;
      d.has_bias = 1'b1; d.bias = GW_AW'(GW_HEAD_B);
    end
    return d;
  endfunction

  function automatic logic central(input logic [31:0] t);
    return (t >= 32'(S_OFF)) && (t < 32'(S_OFF + SEQ_R));
  endfunction

  // next position in the program; fin when the last round has ended
  function automatic pos_t next_pos(input pos_t p, input logic [31:0] rounds,
                                    output logic fin);
    pos_t q;
    q = p;
    fin = 1'b0;
    if (int'(p.op) == OP_CLR) q.op = 5'd0;
    else if ((p.op == 5'd19 && !central(p.t)) || p.op == 5'd22) begin
      q.op = 5'd0;
      q.t  = p.t + 1;
      if (q.t == 32'(SEQ_N)) begin
        q.t  = '0;
        q.r  = p.r + 1;
        q.op = 5'(OP_CLR);
        if (q.r == rounds) fin = 1'b1;
      end
    end else q.op = p.op + 5'd1;
    return q;
  endfunction

  // ---------------- epoch geometry ----------------
  logic [31:0] n_win, n_rounds;
  always_comb begin
    n_win    = (n_instr >= 32'(SEQ_N)) ? (n_instr - 32'(SEQ_N)) / 32'(SEQ_R) + 1 : '0;
    n_rounds = (n_win + 32'(NT - 1)) / 32'(NT);
  end

  // ---------------- compute walker ----------------
  typedef enum logic [3:0] {
    C_IDLE, C_DISP, C_LOADX, C_WAITW, C_RUN, C_DRAIN, C_POST, C_PPWAIT, C_NEXT
  } cst_e;
  cst_e    cs;
  pos_t    cp, cp_nx;
  logic    c_fin;
  opdesc_t cd;
  logic    chalf;
  logic [1:0] half_full;
  logic    half_free_pulse;
  logic [8:0] ci;
  logic [1:0] drain;
  logic    iss, iss_clr;
  logic [31:0] tloadk;

  assign cd    = decode(cp.op);
  always_comb cp_nx = next_pos(cp, n_rounds, c_fin);

  always_comb begin
    for (int k = 0; k < NT; k++) begin
      res_en[k]  = ((cp.r * 32'(NT) + 32'(k)) < n_win);
      res_idx[k] = (cp.r * 32'(NT) + 32'(k)) * 32'(SEQ_R) + cp.t;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; cp <= '0; chalf <= 1'b0; ci <= '0; drain <= '0;
      iss <= 1'b0; iss_clr <= 1'b0; mac_valid <= 1'b0; mac_clr <= 1'b0;
      gib_re <= 1'b0; gib_raddr <= '0; tib_x_we <= '0; tloadk <= '0;
      tib_a_re <= 1'b0; tib_a_row <= '0; tib_a_idx <= '0;
      twb_re <= 1'b0; twb_rhalf <= 1'b0; twb_rrow <= '0;
      pp_start <= 1'b0; pp_op <= PP_NONE; pp_layer <= 1'b0; pp_dst <= '0;
      pp_bias_half <= 1'b0; done <= 1'b0; half_free_pulse <= 1'b0;
      n_mac_ops <= '0; n_weight_waits <= '0; n_res_stalls <= '0;
    end else begin
      pp_start <= 1'b0;
      done     <= 1'b0;
      gib_re   <= 1'b0;
      tib_x_we <= '0;
      tib_a_re <= 1'b0;
      twb_re   <= 1'b0;
      half_free_pulse <= 1'b0;
      iss      <= 1'b0;
      iss_clr  <= 1'b0;
      mac_valid <= iss;       // buffers answer one cycle after the issue
      mac_clr   <= iss_clr;
      case (cs)
        C_IDLE: if (start) begin
          cp    <= '{op: 5'(OP_CLR), t: '0, r: '0};
          chalf <= 1'b0;
          if (n_rounds == '0) done <= 1'b1;
          else                cs <= C_DISP;
        end
        C_DISP: begin
          case (cd.kind)
            K_CLR: begin
              pp_start <= 1'b1; pp_op <= PP_CLR; cs <= C_PPWAIT;
            end
            K_CELL: begin
              pp_start <= 1'b1; pp_op <= PP_CELL; pp_layer <= cd.layer;
              pp_dst <= cd.dst; cs <= C_PPWAIT;
            end
            K_LOADX: begin
              tloadk <= '0; cs <= C_LOADX;
            end
            default: cs <= C_WAITW;
          endcase
        end
        C_LOADX: begin
          // read tile k's feature word; it is written one cycle later
          if (tloadk < 32'(NT)) begin
            gib_re    <= 1'b1;
            gib_raddr <= GI_AW'((cp.r * 32'(NT) + tloadk) * 32'(SEQ_R) + cp.t);
          end
          if (tloadk != '0) tib_x_we[tloadk - 1] <= res_en[tloadk - 1];
          tloadk <= tloadk + 1;
          if (tloadk == 32'(NT)) cs <= C_NEXT;
        end
        C_WAITW: begin
          if (half_full[chalf]) begin
            ci <= '0; cs <= C_RUN;
          end else n_weight_waits <= n_weight_waits + 1;
        end
        C_RUN: begin
          iss       <= 1'b1;
          iss_clr   <= cd.clr && (ci == '0);
          tib_a_re  <= 1'b1; tib_a_row <= cd.src;  tib_a_idx <= ci[7:0];
          twb_re    <= 1'b1; twb_rhalf <= chalf;   twb_rrow  <= ci[7:0];
          ci <= ci + 9'd1;
          if (ci == cd.k - 9'd1) begin
            cs <= C_DRAIN; drain <= '0;
          end
        end
        C_DRAIN: begin
          drain <= drain + 2'd1;
          if (drain == 2'd3) cs <= C_POST;
        end
        C_POST: begin
          if (cd.post == PP_NONE) begin
            half_free_pulse <= 1'b1; chalf <= !chalf;
            n_mac_ops <= n_mac_ops + 1;
            cs <= C_NEXT;
          end else if (cd.post == PP_EMIT && res_busy) begin
            n_res_stalls <= n_res_stalls + 1;
          end else begin
            pp_start <= 1'b1; pp_op <= cd.post; pp_dst <= cd.dst;
            pp_layer <= cd.layer; pp_bias_half <= chalf;
            cs <= C_PPWAIT;
          end
        end
        C_PPWAIT: if (pp_done) begin
          if (cd.kind == K_MAC) begin
            half_free_pulse <= 1'b1; chalf <= !chalf;
            n_mac_ops <= n_mac_ops + 1;
          end
          cs <= C_NEXT;
        end
        C_NEXT: begin
          cp <= cp_nx;
          if (c_fin) begin
            cs <= C_IDLE; done <= 1'b1;
          end else cs <= C_DISP;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // ---------------- staging walker ----------------
  typedef enum logic [2:0] {G_IDLE, G_SEEK, G_WAIT, G_COPY, G_LAST1, G_LAST} gst_e;
  gst_e    gs;
  pos_t    gp, gp_nx;
  logic    g_fin;
  opdesc_t gd;
  logic    ghalf, g_set, g_set_half;
  logic [8:0] gi;
  logic    rd_pend, rd_bias, wr_pend, wr_bias;
  logic [7:0] rd_row, wr_row;

  assign gd    = decode(gp.op);
  always_comb gp_nx = next_pos(gp, n_rounds, g_fin);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs <= G_IDLE; gp <= '0; ghalf <= 1'b0; gi <= '0; g_set <= 1'b0; g_set_half <= 1'b0;
      gwb_re <= 1'b0; gwb_raddr <= '0;
      rd_pend <= 1'b0; rd_bias <= 1'b0; rd_row <= '0;
      wr_pend <= 1'b0; wr_bias <= 1'b0; wr_row <= '0;
    end else begin
      gwb_re  <= 1'b0;
      g_set   <= 1'b0;
      rd_pend <= 1'b0;
      // the buffer answers one cycle after the registered read request
      wr_pend <= rd_pend;
      wr_bias <= rd_bias;
      wr_row  <= rd_row;
      case (gs)
        G_IDLE: if (start && n_rounds != '0) begin
          gp <= '{op: 5'(OP_CLR), t: '0, r: '0}; ghalf <= 1'b0; gs <= G_SEEK;
        end
        G_SEEK: begin
          if (gd.kind == K_MAC) gs <= G_WAIT;
          else begin
            gp <= gp_nx;
            if (g_fin) gs <= G_IDLE;
          end
        end
        G_WAIT: if (!half_full[ghalf]) begin
          gi <= '0; gs <= G_COPY;
        end
        G_COPY: begin
          gwb_re  <= 1'b1;
          rd_pend <= 1'b1;
          rd_row  <= gi[7:0];
          if (gi < gd.k) begin
            gwb_raddr <= gd.wbase + GW_AW'(gi);
            rd_bias   <= 1'b0;
          end else begin
            gwb_raddr <= gd.bias;
            rd_bias   <= 1'b1;
          end
          gi <= gi + 9'd1;
          if ((gi == gd.k - 9'd1 && !gd.has_bias) || gi == gd.k) gs <= G_LAST1;
        end
        G_LAST1: gs <= G_LAST;
        G_LAST: begin
          // the last row is written this cycle; the half is full after it
          g_set <= 1'b1;
          g_set_half <= ghalf;
          ghalf <= !ghalf;
          gp    <= gp_nx;
          gs    <= g_fin ? G_IDLE : G_SEEK;
        end
        default: gs <= G_IDLE;
      endcase
    end
  end

  // rows read last cycle are written into all tiles now
  assign twb_we     = wr_pend && !wr_bias;
  assign twb_whalf  = ghalf;   // ghalf toggles only after the last write
  assign twb_wrow   = wr_row;
  assign bias_we    = wr_pend && wr_bias;
  assign bias_whalf = ghalf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) half_full <= '0;
    else begin
      if (g_set)           half_full[g_set_half] <= 1'b1;
      if (half_free_pulse) half_full[!chalf] <= 1'b0;   // chalf already toggled
    end
  end

  assign busy = (cs != C_IDLE) || (gs != G_IDLE);

  // a half is never staged while it is in use, nor used before it is staged
  a_stage_free: assert property (@(posedge clk) disable iff (!rst_n)
    (gs == G_COPY) |-> !half_full[ghalf]);
  a_run_full: assert property (@(posedge clk) disable iff (!rst_n)
    (cs == C_RUN) |-> half_full[chalf]);
endmodule
