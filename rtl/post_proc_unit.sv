// post_proc_unit: the bias / ReLU / sigmoid / tanh stage that follows the
// vector MAC, plus the element-wise LSTM cell update and the output heads'
// mask-based selection.
//
// Operations (op at start):
//   PP_ID, PP_RELU, PP_SIG, PP_TANH  For each of the 256 partial sums:
//       v = sat8((acc + (bias << FRAC_W)) >>> FRAC_W), then identity, ReLU,
//       sigmoid or tanh (tables in ns_pkg); the 256 results are written as one
//       row of the tile input buffer (dst_row). 16 elements per cycle.
//   PP_CELL  Reads the gate rows i, f, g, o from the tile input buffer and, per
//       element, c' = sat16((f*c + i*g) >>> FRAC_A) and
//       h = sat8((o * tanh(sat8(c'))) >>> FRAC_A); c' is kept in the cell-state
//       registers of the given layer and h is written to dst_row.
//   PP_EMIT  Output heads. Sums 0 and 1 are the two class logits, 2 and 3 the
//       short- and long-latency regressors (each plus its bias). The class is
//       long when logit 1 > logit 0; the selected regressor, requantised to
//       INT16 with FRAC_A fraction bits, is the predicted log(1 + cycles).
//   PP_CLR   Zeroes the cell state of both layers and writes zero rows to the
//       two hidden-state rows (start of a new window).
// The bias register has two halves so that the bias of the next matrix can be
// loaded while the current one is in use.
//
// The paper names bias, ReLU, sigmoid and tanh units after the MAC, pipelined
// after the matrix products, and describes the two regime heads and the
// mask-based selection; the fixed-point formats, the tables, the 16-per-cycle
// throughput and the placement of the cell update in this unit are this
// design's choices.
//
// Timing: start is taken when busy is low. Activation ops take 16 cycles plus
// one write cycle, PP_CELL 4 row reads plus 17 cycles, PP_EMIT and PP_CLR one
// or two cycles. done pulses in the last cycle; res_valid pulses with done for
// PP_EMIT.
module post_proc_unit
  import ns_pkg::*;
#(
  parameter int N    = 256,
  parameter int PPL  = 16,                 // elements per cycle
  parameter int AW   = 6                   // tile input buffer row address
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 start,
  input  pp_op_e               op,
  input  logic                 layer,
  input  logic [AW-1:0]        dst_row,
  input  logic                 bias_half,
  output logic                 busy,
  output logic                 done,
  // bias register load
  input  logic                 bias_we,
  input  logic                 bias_whalf,
  input  logic [N*8-1:0]       bias_wdata,
  // partial sums
  input  acc_t                 acc [N],
  // tile input buffer: row read and row write
  output logic                 tib_re,
  output logic [AW-1:0]        tib_rrow,
  input  logic [N*8-1:0]       tib_rdata,
  output logic                 tib_we,
  output logic [AW-1:0]        tib_wrow,
  output logic [N*8-1:0]       tib_wdata,
  // per-instruction prediction
  output logic                 res_valid,
  output logic                 res_cls,
  output logic signed [15:0]   res_val
);
  localparam int NCH = N / PPL;

  typedef enum logic [2:0] {S_IDLE, S_ACT, S_RDG, S_CELL, S_WR, S_CLR2} state_e;
  state_e st;

  pp_op_e              op_q;
  logic                layer_q, half_q;
  logic [AW-1:0]       dst_q;
  logic [$clog2(NCH)-1:0] ch;
  logic [2:0]          rd_cnt;
  logic [N*8-1:0]      bias_r [2];
  logic [N*8-1:0]      gate [4];
  logic signed [15:0]  cst [2][N];      // cell state (read view of g_elem)
  act_t                orow [N];        // result row (read view of g_elem)
  logic [N*8-1:0]      out_row;

  function automatic act_t act_fn(input acc_t a, input act_t b, input pp_op_e o);
    acc_t  pre;
    act_t  v;
    pre = a + (acc_t'(b) <<< FRAC_W);
    v   = sat8(pre >>> FRAC_W);
    case (o)
      PP_RELU: return (v < 0) ? act_t'(0) : v;
      PP_SIG:  return SIG_LUT[8'(v) ^ 8'h80];
      PP_TANH: return TANH_LUT[8'(v) ^ 8'h80];
      default: return v;
    endcase
  endfunction

  // ---------------- the PPL lanes of the current chunk ----------------
  act_t               l_act [PPL];     // activation result
  logic signed [15:0] l_cn  [PPL];     // new cell state
  act_t               l_h   [PPL];     // new hidden state
  always_comb begin
    for (int j = 0; j < PPL; j++) begin
      automatic int e = int'(ch)*PPL + j;
      automatic acc_t fc, ig, oh;
      l_act[j] = act_fn(acc[e], $signed(bias_r[half_q][e*8 +: 8]), op_q);
      fc = acc_t'($signed(gate[1][e*8 +: 8])) * acc_t'(cst[layer_q][e]);
      ig = acc_t'($signed(gate[0][e*8 +: 8])) * acc_t'($signed(gate[2][e*8 +: 8]));
      l_cn[j] = sat16((fc + ig) >>> FRAC_A);
      oh = acc_t'($signed(gate[3][e*8 +: 8])) *
           acc_t'(TANH_LUT[8'(sat8(acc_t'(l_cn[j]))) ^ 8'h80]);
      l_h[j] = sat8(oh >>> FRAC_A);
    end
  end

  // ---------------- per-element state ----------------
  logic clr_state;
  assign clr_state = (st == S_IDLE) && start && (op == PP_CLR);

  for (genvar e = 0; e < N; e++) begin : g_elem
    localparam int C = e / PPL, J = e % PPL;
    logic signed [15:0] c0, c1;
    act_t               r;
    logic               sel;
    assign sel = (int'(ch) == C);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        c0 <= '0; c1 <= '0; r <= '0;
      end else if (clr_state) begin
        c0 <= '0; c1 <= '0;
      end else if (sel && st == S_ACT) begin
        r <= l_act[J];
      end else if (sel && st == S_CELL) begin
        r <= l_h[J];
        if (layer_q) c1 <= l_cn[J];
        else         c0 <= l_cn[J];
      end
    end
    assign cst[0][e] = c0;
    assign cst[1][e] = c1;
    assign orow[e]   = r;
  end

  always_comb
    for (int e = 0; e < N; e++) out_row[e*8 +: 8] = orow[e];

  // ---------------- heads (combinational from the sums) ----------------
  acc_t lg0, lg1, rs, rl;
  logic cls_c;
  always_comb begin
    lg0   = acc[0] + (acc_t'($signed(bias_r[half_q][0*8 +: 8])) <<< FRAC_W);
    lg1   = acc[1] + (acc_t'($signed(bias_r[half_q][1*8 +: 8])) <<< FRAC_W);
    rs    = acc[2] + (acc_t'($signed(bias_r[half_q][2*8 +: 8])) <<< FRAC_W);
    rl    = acc[3] + (acc_t'($signed(bias_r[half_q][3*8 +: 8])) <<< FRAC_W);
    cls_c = (lg1 > lg0);
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; op_q <= PP_NONE; layer_q <= 1'b0; half_q <= 1'b0; dst_q <= '0;
      ch <= '0; rd_cnt <= '0;
      done <= 1'b0; res_valid <= 1'b0; res_cls <= 1'b0; res_val <= '0;
      tib_re <= 1'b0; tib_rrow <= '0; tib_we <= 1'b0; tib_wrow <= '0; tib_wdata <= '0;
      for (int h = 0; h < 2; h++) bias_r[h] <= '0;
      for (int g = 0; g < 4; g++) gate[g] <= '0;
    end else begin
      done      <= 1'b0;
      res_valid <= 1'b0;
      tib_we    <= 1'b0;
      tib_re    <= 1'b0;
      if (bias_we) bias_r[bias_whalf] <= bias_wdata;
      case (st)
        S_IDLE: if (start) begin
          op_q <= op; layer_q <= layer; dst_q <= dst_row; half_q <= bias_half; ch <= '0;
          case (op)
            PP_ID, PP_RELU, PP_SIG, PP_TANH: st <= S_ACT;
            PP_CELL: begin
              st <= S_RDG; rd_cnt <= '0;
              tib_re <= 1'b1; tib_rrow <= AW'(TIB_ROW_G);
            end
            PP_EMIT: st <= S_WR;     // one cycle to let half_q settle
            PP_CLR: begin            // cell state cleared by g_elem
              tib_we <= 1'b1; tib_wrow <= AW'(TIB_ROW_H0); tib_wdata <= '0;
              st <= S_CLR2;
            end
            default: done <= 1'b1;
          endcase
        end
        S_ACT: begin
          ch <= ch + 1'b1;
          if (int'(ch) == NCH-1) st <= S_WR;
        end
        S_RDG: begin
          // row reads issued for cycles 0..3, data arrives cycles 1..4
          if (rd_cnt < 3'd3) begin
            tib_re <= 1'b1; tib_rrow <= AW'(TIB_ROW_G + int'(rd_cnt) + 1);
          end
          if (rd_cnt != 3'd0) gate[2'(rd_cnt - 3'd1)] <= tib_rdata;
          rd_cnt <= rd_cnt + 3'd1;
          if (rd_cnt == 3'd4) begin
            gate[3] <= tib_rdata;
            st <= S_CELL;
          end
        end
        S_CELL: begin
          ch <= ch + 1'b1;
          if (int'(ch) == NCH-1) st <= S_WR;
        end
        S_WR: begin
          if (op_q == PP_EMIT) begin
            res_valid <= 1'b1;
            res_cls   <= cls_c;
            res_val   <= sat16((cls_c ? rl : rs) >>> FRAC_W);
          end else begin
            tib_we <= 1'b1; tib_wrow <= dst_q; tib_wdata <= out_row;
          end
          done <= 1'b1;
          st   <= S_IDLE;
        end
        S_CLR2: begin
          tib_we <= 1'b1; tib_wrow <= AW'(TIB_ROW_H1); tib_wdata <= '0;
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
