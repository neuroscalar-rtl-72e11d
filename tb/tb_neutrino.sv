// tb_neutrino: self-checking test of the accelerator with two tiles and short
// windows (SEQ_N = 8, SEQ_R = 2).
//
// Random INT8 weights and features are placed in the memory model; the test
// loads the weights (LOAD_W), then 13 instructions of features (LOAD_X), runs
// the inference and compares every result word in memory with tb_ref_pkg's
// reference model (3 windows: tile 0 and 1 in round 0, tile 0 alone in round
// 1, so an idle tile is exercised too). It also checks that a 256-input matrix
// product keeps the MAC busy for exactly 256 consecutive cycles, that no
// result is written for an instruction outside the predicted segments and
// that both latency classes occur.
module tb_neutrino;
  import ns_pkg::*;
  import tb_ref_pkg::*;

  localparam int NT = 2, SN = 8, SR = 2, NI = 13;
  localparam longint W_BASE = 64'h10_0000, X_BASE = 64'h0, R_BASE = 64'h80_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_is_w = 0, cmd_ready, cmd_done, start = 0, busy, done;
  logic [MEM_AW-1:0] cmd_addr = '0;
  logic [31:0] cmd_len = '0, n_instr = '0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [MEM_AW-1:0] rd_req_addr;
  logic [MEM_W-1:0] rd_resp_data;
  mem_wr_t mem_wr;
  logic [31:0] n_mac_ops, n_weight_waits, n_res_stalls;

  neutrino #(.NT(NT), .SEQ_N(SN), .SEQ_R(SR)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_is_w, .cmd_addr, .cmd_len, .cmd_ready, .cmd_done,
    .start, .n_instr, .res_base(R_BASE), .busy, .done,
    .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_resp_valid, .rd_resp_data,
    .mem_wr_valid, .mem_wr, .mem_wr_ready, .n_mac_ops, .n_weight_waits, .n_res_stalls
  );

  tb_sysmem #(.RD_LAT(2), .STALL_PCT(30)) mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_resp_valid, .rd_resp_data,
    .wr_valid(mem_wr_valid), .wr(mem_wr), .wr_ready(mem_wr_ready)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // longest run of consecutive MAC cycles
  int run = 0, max_run = 0;
  always @(posedge clk) begin
    if (dut.mac_valid) run <= run + 1;
    else begin if (run > max_run) max_run <= run; run <= 0; end
  end

  task automatic do_cmd(input bit is_w, input longint addr, input int len);
    @(negedge clk);
    cmd_valid = 1; cmd_is_w = is_w; cmd_addr = addr; cmd_len = len;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  initial begin
    int n_long, n_short;
    longint t0, t1;
    rand_weights(3);
    rand_features(NI, 40);
    shape_heads();
    ref_run(NI, SN, SR);
    balance_classes(NI, SN, SR);
    for (int r = 0; r < GW_USED; r++) begin
      logic [2047:0] row;
      row = weight_row(r);
      for (int b = 0; b < 8; b++) mem.put_line(W_BASE + r*256 + b*32, row[b*256 +: 256]);
    end
    for (int i = 0; i < NI; i += 2) begin
      logic [255:0] l;
      l = '0;
      l[0 +: 104] = feat_word(i);
      if (i + 1 < NI) l[128 +: 104] = feat_word(i + 1);
      mem.put_line(X_BASE + i*16, l);
    end
    repeat (10) @(negedge clk);
    rst_n = 1;
    do_cmd(1, W_BASE, GW_USED);
    do_cmd(0, X_BASE, NI);
    repeat (2) @(negedge clk);
    check(dut.u_gib.mem[NI-1] == feat_word(NI-1), "last feature word loaded");
    check(dut.u_gwb.mem[GW_USED-1] == weight_row(GW_USED-1), "last weight row loaded");
    @(negedge clk);
    n_instr = NI; start = 1; t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    repeat (20) @(negedge clk);
    n_long = 0; n_short = 0;
    for (int i = 0; i < NI; i++) begin
      logic [31:0] w;
      w = mem.get_word(R_BASE + i*4);
      if (pred_val.exists(i)) begin
        check(w[16] == pred_cls[i], $sformatf("class of instruction %0d", i));
        check($signed(w[15:0]) == 16'(pred_val[i]),
              $sformatf("value of instruction %0d: %0d vs %0d", i, $signed(w[15:0]), pred_val[i]));
        if (pred_cls[i]) n_long++; else n_short++;
      end else check(w == 0, $sformatf("no result for instruction %0d", i));
    end
    check(pred_val.num() == 6, "reference predicts 6 instructions");
    check(max_run == 256, $sformatf("256-cycle matrix product, got %0d", max_run));
    // 2 rounds x 8 steps x 17 products + 2 rounds x 2 central x 3 head products
    check(n_mac_ops == 2*8*17 + 2*2*3, $sformatf("MAC operations %0d", n_mac_ops));
    check(n_long > 0 && n_short > 0, $sformatf("both classes seen (%0d long, %0d short)", n_long, n_short));
    $display("inference cycles: %0d, weight waits %0d, result stalls %0d",
             (t1 - t0) / 10, n_weight_waits, n_res_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
