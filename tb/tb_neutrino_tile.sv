// tb_neutrino_tile: self-checking test of one compute tile, driven by a
// hand-written sequence in place of the tile controller.
//
// The test loads one instruction's 13 features into the tile, stages weight
// rows and bias rows into both halves of the tile weight buffer, and runs
// three operations with the same signal timing the controller uses (operand
// reads, MAC valid one cycle later, three drain cycles, then
// post-processing):
//   1. projection, 13 inputs from half 0, bias + identity into row XT;
//   2. a 256-input product from XT with half 1 weights, bias + sigmoid into
//      gate row 0;
//   3. the output heads: a 256-input product from XT with half 0 weights,
//      PP_EMIT.
// Every result is compared with the tb_ref_pkg arithmetic. Rate: one weight
// row and one activation per cycle, so operation 2 must take 256 MAC cycles.
module tb_neutrino_tile;
  import ns_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we = 0, twb_we = 0, twb_whalf = 0, bias_we = 0, bias_whalf = 0;
  logic [103:0] x_data = '0;
  logic [2047:0] gw_data = '0;
  logic [7:0] twb_wrow = '0, tib_a_idx = '0, twb_rrow = '0;
  logic tib_a_re = 0, twb_re = 0, twb_rhalf = 0, mac_valid = 0, mac_clr = 0;
  logic [5:0] tib_a_row = '0, pp_dst = '0;
  logic pp_start = 0, pp_layer = 0, pp_bias_half = 0, pp_done, pp_busy;
  pp_op_e pp_op = PP_NONE;
  logic res_valid, res_cls;
  logic signed [15:0] res_val;

  neutrino_tile dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  int n_mac = 0;
  always @(posedge clk) if (mac_valid) n_mac++;
  bit got_res; bit r_cls; logic signed [15:0] r_val;
  always @(posedge clk) if (res_valid) begin got_res <= 1; r_cls <= res_cls; r_val <= res_val; end

  task automatic stage(input bit half, input int base, input int k, input int bias);
    for (int i = 0; i < k; i++) begin
      twb_we = 1; twb_whalf = half; twb_wrow = 8'(i); gw_data = weight_row(base + i);
      @(negedge clk);
    end
    twb_we = 0;
    bias_we = 1; bias_whalf = half; gw_data = weight_row(bias);
    @(negedge clk);
    bias_we = 0;
  endtask

  // K operand reads, MAC one cycle behind, drain, post-processing
  task automatic run(input int src, input bit half, input int k, input pp_op_e op, input int dst);
    for (int i = 0; i <= k; i++) begin
      tib_a_re = (i < k); tib_a_row = 6'(src); tib_a_idx = 8'(i);
      twb_re = (i < k); twb_rhalf = half; twb_rrow = 8'(i);
      mac_valid = (i > 0); mac_clr = (i == 1);
      @(negedge clk);
    end
    tib_a_re = 0; twb_re = 0; mac_valid = 0; mac_clr = 0;
    repeat (3) @(negedge clk);
    pp_start = 1; pp_op = op; pp_dst = 6'(dst); pp_bias_half = half;
    @(negedge clk);
    pp_start = 0;
    while (!pp_done) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic int row_elem(input int r, input int j);
    return int'($signed(dut.u_tib.mem[r][j*8 +: 8]));
  endfunction

  initial begin
    int x [256], xt [256];
    longint a [256];
    rand_weights(3);
    rand_features(1, 40);
    repeat (10) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    x_we = 1; x_data = feat_word(0);
    @(negedge clk);
    x_we = 0;
    // 1. projection
    stage(0, GW_PROJ, NFEAT, GW_PROJ_B);
    run(TIB_ROW_X, 0, NFEAT, PP_ID, TIB_ROW_XT);
    for (int j = 0; j < 256; j++) begin x[j] = (j < 13) ? int'(feat[0][j]) : 0; a[j] = 0; end
    matvec(GW_PROJ, 13, x, a);
    for (int j = 0; j < 256; j++) begin
      xt[j] = ref_act(a[j], gw[GW_PROJ_B][j], 0);
      check(row_elem(TIB_ROW_XT, j) == xt[j], $sformatf("projection %0d", j));
    end
    // 2. 256-input product, sigmoid
    stage(1, gw_wih(0, 0), 256, gw_bias(0, 0));
    n_mac = 0;
    run(TIB_ROW_XT, 1, 256, PP_SIG, TIB_ROW_G);
    check(n_mac == 256, $sformatf("256 MAC cycles, got %0d", n_mac));
    for (int j = 0; j < 256; j++) a[j] = 0;
    matvec(gw_wih(0, 0), 256, xt, a);
    for (int j = 0; j < 256; j++)
      check(row_elem(TIB_ROW_G, j) == ref_act(a[j], gw[gw_bias(0, 0)][j], 2), $sformatf("gate %0d", j));
    // 3. heads
    stage(0, GW_REG, 256, GW_HEAD_B);
    got_res = 0;
    run(TIB_ROW_XT, 0, 256, PP_EMIT, 0);
    for (int j = 0; j < 256; j++) a[j] = 0;
    matvec(GW_REG, 256, xt, a);
    begin
      longint lg0, lg1, rs, rl;
      lg0 = a[0] + gw[GW_HEAD_B][0] * 64; lg1 = a[1] + gw[GW_HEAD_B][1] * 64;
      rs  = a[2] + gw[GW_HEAD_B][2] * 64; rl  = a[3] + gw[GW_HEAD_B][3] * 64;
      check(got_res, "result emitted");
      check(r_cls == (lg1 > lg0), "class");
      check(r_val == 16'(rsat(((lg1 > lg0) ? rl : rs) >>> 6, -32768, 32767)), "value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
