// tb_tile_control: self-checking test of the accelerator's static schedule.
//
// The controller runs alone with NT = 2 tiles and short windows (SEQ_N = 8,
// SEQ_R = 2). The testbench stands in for the tiles and buffers: it answers
// each post-processing start after a random delay and raises res_busy at
// random. It writes out the expected program independently of the RTL (clear,
// then per instruction: feature load, projection, eight gate products and a
// cell update per layer, and for the central instructions the classifier and
// the regressors) and checks, for three epochs (13, 7 and 10 instructions):
//   * every matrix product reads source row and index 0..K-1 in order, and the
//     tile-weight-buffer row it reads holds the global weight row the product
//     needs (a model tracks which global row was staged into each half/row);
//   * every product of K inputs takes exactly K consecutive MAC cycles (256 for
//     a 256x256 matrix, as in the paper);
//   * the bias register half used by post-processing holds the right bias row;
//   * post-processing operations, destinations and layers come in order;
//   * features are read from window w = r*NT + k at instruction w*SEQ_R + t and
//     written only into tiles whose window exists;
//   * result indices and enables at each emit;
//   * an epoch shorter than a window finishes at once; done pulses once;
//   * weight waits and result stalls both happen.
module tb_tile_control;
  import ns_pkg::*;
  localparam int NT = 2, SN = 8, SR = 2, SOFF = (SN - SR) / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [31:0] n_instr = '0;
  logic gib_re, gwb_re, twb_we, twb_whalf, bias_we, bias_whalf;
  logic [16:0] gib_raddr;
  logic [NT-1:0] tib_x_we, res_en;
  logic [12:0] gwb_raddr;
  logic [7:0] twb_wrow, tib_a_idx, twb_rrow;
  logic tib_a_re, twb_re, twb_rhalf, mac_valid, mac_clr;
  logic [5:0] tib_a_row, pp_dst;
  logic pp_start, pp_layer, pp_bias_half, pp_done = 0, res_busy = 0;
  pp_op_e pp_op;
  logic [31:0] res_idx [NT];
  logic [31:0] n_mac_ops, n_weight_waits, n_res_stalls;

  tile_control #(.NT(NT), .SEQ_N(SN), .SEQ_R(SR)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- expected program ----------------
  typedef struct { int k; int wbase; int src; int bias; } prod_t;
  typedef struct { pp_op_e op; int dst; int layer; int bias; } ppx_t;
  prod_t exp_prod [$];
  ppx_t  exp_pp [$];
  int    exp_x [$];          // tile*1e6 + feature address, per written feature
  int    exp_res [$];        // per emit and tile: index, or -1 if disabled

  function automatic void add_prod(int k, int wbase, int src, int bias);
    prod_t p; p.k = k; p.wbase = wbase; p.src = src; p.bias = bias;
    exp_prod.push_back(p);
  endfunction
  function automatic void add_pp(pp_op_e op, int dst, int layer, int bias);
    ppx_t p; p.op = op; p.dst = dst; p.layer = layer; p.bias = bias;
    exp_pp.push_back(p);
  endfunction

  function automatic void build(int n);
    int nwin, nr;
    nwin = (n >= SN) ? (n - SN) / SR + 1 : 0;
    nr = (nwin + NT - 1) / NT;
    for (int r = 0; r < nr; r++) begin
      add_pp(PP_CLR, 0, 0, -1);
      for (int t = 0; t < SN; t++) begin
        for (int k = 0; k < NT; k++)
          if (r*NT + k < nwin) exp_x.push_back(k*1000000 + (r*NT + k)*SR + t);
        add_prod(NFEAT, GW_PROJ, TIB_ROW_X, GW_PROJ_B);
        add_pp(PP_ID, TIB_ROW_XT, 0, GW_PROJ_B);
        for (int l = 0; l < 2; l++) begin
          for (int g = 0; g < 4; g++) begin
            add_prod(256, gw_wih(l, g), (l == 0) ? TIB_ROW_XT : TIB_ROW_H0, -1);
            add_prod(256, gw_whh(l, g), TIB_ROW_H0 + l, gw_bias(l, g));
            add_pp((g == 2) ? PP_TANH : PP_SIG, TIB_ROW_G + g, l, gw_bias(l, g));
          end
          add_pp(PP_CELL, TIB_ROW_H0 + l, l, -1);
        end
        if (t >= SOFF && t < SOFF + SR) begin
          add_prod(256, GW_FC1, TIB_ROW_H1, GW_FC1_B);
          add_pp(PP_RELU, TIB_ROW_Z, 0, GW_FC1_B);
          add_prod(64, GW_FC2, TIB_ROW_Z, -1);
          add_prod(256, GW_REG, TIB_ROW_H1, GW_HEAD_B);
          add_pp(PP_EMIT, 0, 0, GW_HEAD_B);
          for (int k = 0; k < NT; k++)
            exp_res.push_back((r*NT + k < nwin) ? (r*NT + k)*SR + t : -1);
        end
      end
    end
  endfunction

  // ---------------- models of the buffers ----------------
  int wmodel [2][256];
  int bmodel [2];
  int gw_last, gib_last;
  bit gw_last_v, gib_last_v;
  prod_t cur;
  bit in_prod;
  int pos, n_prods, n_pps, n_done;
  int run_mac;

  always @(posedge clk) begin
    if (rst_n) begin
      // staging: the global row read last cycle is written now
      if (twb_we)  begin check(gw_last_v, "staging write has a read"); wmodel[twb_whalf][twb_wrow] = gw_last; end
      if (bias_we) begin check(gw_last_v, "bias write has a read");   bmodel[bias_whalf] = gw_last; end
      gw_last_v = gwb_re; gw_last = int'(gwb_raddr);
      // features
      for (int k = 0; k < NT; k++) if (tib_x_we[k]) begin
        check(gib_last_v, "feature write has a read");
        if (exp_x.size() == 0) check(0, "unexpected feature write");
        else check(exp_x.pop_front() == k*1000000 + gib_last,
                   $sformatf("feature address %0d for tile %0d", gib_last, k));
      end
      gib_last_v = gib_re; gib_last = int'(gib_raddr);
      // MAC operand fetch
      if (tib_a_re) begin
        check(twb_re, "weight and activation fetched together");
        if (tib_a_idx == 0 && !in_prod) begin
          if (exp_prod.size() == 0) check(0, "unexpected product");
          else cur = exp_prod.pop_front();
          in_prod = 1; pos = 0; n_prods++;
          check(int'(tib_a_row) == cur.src, $sformatf("product source row %0d vs %0d", tib_a_row, cur.src));
        end
        check(int'(tib_a_idx) == pos && int'(twb_rrow) == pos, "element order");
        check(wmodel[twb_rhalf][twb_rrow] == cur.wbase + pos,
              $sformatf("weight row %0d staged, %0d needed", wmodel[twb_rhalf][twb_rrow], cur.wbase + pos));
        pos++;
      end else if (in_prod) begin
        check(pos == cur.k, $sformatf("product of %0d inputs took %0d consecutive cycles", cur.k, pos));
        in_prod = 0;
      end
      // post-processing
      if (pp_start) begin
        ppx_t e;
        n_pps++;
        if (exp_pp.size() == 0) check(0, "unexpected post-processing");
        else begin
          e = exp_pp.pop_front();
          check(pp_op == e.op, $sformatf("pp op %s vs %s", pp_op.name(), e.op.name()));
          if (e.op != PP_CLR && e.op != PP_EMIT) check(int'(pp_dst) == e.dst, "pp destination");
          if (e.op == PP_CELL) check(int'(pp_layer) == e.layer, "cell layer");
          if (e.bias >= 0) check(bmodel[pp_bias_half] == e.bias, $sformatf("bias row %0d vs %0d", bmodel[pp_bias_half], e.bias));
          if (e.op == PP_EMIT) for (int k = 0; k < NT; k++) begin
            int x;
            x = exp_res.pop_front();
            check(res_en[k] == (x >= 0), "result enable");
            if (x >= 0) check(int'(res_idx[k]) == x, $sformatf("result index %0d vs %0d", res_idx[k], x));
          end
        end
      end
      if (done) n_done++;
    end
  end

  // post-processing stand-in: done 1..20 cycles after start
  initial begin
    forever begin
      @(posedge clk);
      if (pp_start) begin
        repeat ($urandom_range(20, 1) - 1) @(posedge clk);
        #1 pp_done = 1;
        @(posedge clk);
        #1 pp_done = 0;
      end
    end
  end
  always @(negedge clk) res_busy <= ($urandom_range(99, 0) < 30);

  task automatic epoch(input int n);
    int t0;
    build(n);
    n_done = 0;
    @(negedge clk);
    n_instr = n; start = 1;
    @(negedge clk);
    start = 0;
    t0 = 0;
    while (busy || !n_done) begin @(negedge clk); t0++; if (t0 > 400000) break; end
    repeat (5) @(negedge clk);
    check(n_done == 1, $sformatf("one done pulse for %0d instructions", n));
    check(exp_prod.size() == 0 && exp_pp.size() == 0 && exp_x.size() == 0 && exp_res.size() == 0,
          $sformatf("whole program executed (%0d products, %0d pp, %0d loads left)",
                    exp_prod.size(), exp_pp.size(), exp_x.size()));
  endtask

  initial begin
    gw_last_v = 0; gib_last_v = 0; in_prod = 0; n_prods = 0; n_pps = 0;
    for (int h = 0; h < 2; h++) begin bmodel[h] = -1; for (int r = 0; r < 256; r++) wmodel[h][r] = -1; end
    repeat (10) @(negedge clk);
    rst_n = 1;
    epoch(13);
    check(n_mac_ops == 2*SN*17 + 2*SR*3, $sformatf("MAC operations %0d", n_mac_ops));
    epoch(7);
    check(n_mac_ops == 2*SN*17 + 2*SR*3, "no work for a short epoch");
    epoch(10);
    check(n_mac_ops == 3*SN*17 + 3*SR*3, $sformatf("MAC operations after third epoch %0d", n_mac_ops));
    check(n_weight_waits > 0, "weight waits happened");
    check(n_res_stalls > 0, "result stalls happened");
    $display("products %0d, pp ops %0d, weight waits %0d, result stalls %0d",
             n_prods, n_pps, n_weight_waits, n_res_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
