// tb_neuroscalar_top: end-to-end test of the whole chip at its full size
// (default parameters: one tile, windows of 576 instructions, 64 predicted per
// window, 5 retire lanes, 512-entry trace FIFO, 1.25MB global buffers).
//
// Flow, as in deployment:
//  1. Trace collection. The test plays a core retiring 0..5 instructions per
//     cycle (holding them while ret_ready is low) and switching between the
//     traced process and another one. The collector is armed for an epoch of
//     3003 instructions of the traced process. The memory behind the collector
//     refuses writes for a long stretch so that the FIFO fills and the core is
//     stalled. The test checks that memory then holds exactly the target
//     process's records, in order, with the last entry padded with zero
//     records.
//  2. The test acts as the host driver. It turns the first 640 records into
//     13 INT8 features each (PC and address split 22/22/20 bits as in the
//     paper, folded to INT8 by a fixed rule of this test), writes them and
//     random weights to the accelerator's memory, and issues LOAD_W, LOAD_X
//     and a run over the 640 instructions (two windows).
//  3. Every prediction word is compared with the tb_ref_pkg reference, and no
//     word outside the predicted segments may be written. The result memory
//     refuses writes for a while during the run so that the controller must
//     hold back a result.
// The test counts each mechanism and fails if one never happened: process
// pause, FIFO-full stall, partial-entry flush, write back-pressure on both
// memories, weight-staging waits and result stalls. Rates checked: the
// collector takes up to five instructions per cycle; a 256-input matrix
// product keeps the MAC busy for exactly 256 consecutive cycles; the MAC
// operation count matches the program (17 per instruction plus 3 per
// predicted instruction). The measured cycles per LSTM layer are printed.
module tb_neuroscalar_top;
  import ns_pkg::*;
  import tb_ref_pkg::*;

  localparam int EPOCH = 3003, NI = 640, TPID = 7, OPID = 3;
  localparam longint T_BASE = 64'h4000_0000, W_BASE = 64'h10_0000,
                     X_BASE = 64'h0, R_BASE = 64'h80_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---- DUT ports ----
  logic tc_arm = 0, ret_ready, tc_stall, tc_active, tc_done, tc_armed;
  logic [15:0] tc_target_pid = TPID, cur_pid = TPID;
  logic [31:0] tc_epoch_len = EPOCH, tc_count;
  logic [MEM_AW-1:0] tc_base_addr = T_BASE;
  logic [4:0] ret_valid = '0;
  trace_rec_t ret_rec [5];
  logic [9:0] tc_level;
  logic tc_wr_valid, tc_wr_ready;
  mem_wr_t tc_wr;
  logic acc_cmd_valid = 0, acc_cmd_is_w = 0, acc_cmd_ready, acc_cmd_done;
  logic [MEM_AW-1:0] acc_cmd_addr = '0, acc_res_base = R_BASE;
  logic [31:0] acc_cmd_len = '0, acc_n_instr = '0;
  logic acc_start = 0, acc_busy, acc_done;
  logic acc_rd_req_valid, acc_rd_req_ready, acc_rd_resp_valid, acc_wr_valid, acc_wr_ready;
  logic [MEM_AW-1:0] acc_rd_req_addr;
  logic [MEM_W-1:0] acc_rd_resp_data;
  mem_wr_t acc_wr;
  logic [31:0] acc_n_mac_ops, acc_n_weight_waits, acc_n_res_stalls;

  neuroscalar_top dut (.*);

  // collector memory: write-only use, read channel idle
  logic t_rq_ready, t_rs_valid;
  logic [MEM_W-1:0] t_rs_data;
  tb_sysmem #(.RD_LAT(2), .STALL_PCT(20)) tmem (
    .clk, .rd_req_valid(1'b0), .rd_req_addr('0), .rd_req_ready(t_rq_ready),
    .rd_resp_valid(t_rs_valid), .rd_resp_data(t_rs_data),
    .wr_valid(tc_wr_valid), .wr(tc_wr), .wr_ready(tc_wr_ready));
  tb_sysmem #(.RD_LAT(2), .STALL_PCT(10)) amem (
    .clk, .rd_req_valid(acc_rd_req_valid), .rd_req_addr(acc_rd_req_addr),
    .rd_req_ready(acc_rd_req_ready), .rd_resp_valid(acc_rd_resp_valid),
    .rd_resp_data(acc_rd_resp_data), .wr_valid(acc_wr_valid), .wr(acc_wr),
    .wr_ready(acc_wr_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // ---- mechanism counters ----
  int n_pause, n_stall, n_tc_bp, n_acc_bp, n_groups5, max_run, run;
  always @(posedge clk) if (rst_n) begin
    if (tc_armed && !tc_done && cur_pid != TPID && ret_valid != 0) n_pause++;
    if (tc_stall) n_stall++;
    if (tc_wr_valid && !tc_wr_ready) n_tc_bp++;
    if (acc_wr_valid && !acc_wr_ready) n_acc_bp++;
    if (tc_active && ret_ready && ret_valid == 5'h1f) n_groups5++;
    if (dut.u_acc.mac_valid) run++;
    else begin if (run > max_run) max_run = run; run = 0; end
  end

  // ---- core model: retires a stream of instructions ----
  trace_rec_t traced [$];        // what the collector must record
  int n_retired;
  function automatic trace_rec_t rnd_rec();
    trace_rec_t r;
    r.rsvd = '0;
    r.pc = {32'h0000_7fff, $urandom} & ~64'h3;
    r.maddr = ($urandom_range(2, 0) == 0) ? 64'h0 : {32'h0000_7ffe, $urandom};
    r.opclass = 8'($urandom_range(40, 0));
    r.src1 = '{cls: 4'($urandom_range(3, 0)), num: 8'($urandom_range(31, 0))};
    r.src2 = '{cls: 4'($urandom_range(3, 0)), num: 8'($urandom_range(31, 0))};
    r.dst  = '{cls: 4'($urandom_range(3, 0)), num: 8'($urandom_range(31, 0))};
    return r;
  endfunction

  bit core_on = 0;
  int pid_timer = 0;
  always @(negedge clk) begin
    if (core_on) begin
      // retirement group changes only when the last one was taken
      if (ret_valid == 0 || ret_ready) begin
        int n;
        n = ($urandom_range(3, 0) == 0) ? 5 : $urandom_range(5, 0);
        ret_valid = 5'((1 << n) - 1);
        for (int i = 0; i < 5; i++) ret_rec[i] = rnd_rec();
      end
      // context switches: 300 cycles target, 60 cycles other process
      pid_timer++;
      if (cur_pid == TPID && pid_timer >= 300) begin cur_pid = OPID; pid_timer = 0; end
      else if (cur_pid == OPID && pid_timer >= 60) begin cur_pid = TPID; pid_timer = 0; end
    end else ret_valid = '0;
  end
  always @(posedge clk) if (rst_n && ret_valid != 0 && ret_ready) begin
    n_retired += $countones(ret_valid);
    if (tc_armed && cur_pid == TPID)
      for (int i = 0; i < 5; i++)
        if (ret_valid[i] && traced.size() < EPOCH) traced.push_back(ret_rec[i]);
  end

  // ---- host side helpers ----
  function automatic trace_rec_t mem_rec(input int k);
    logic [1023:0] slot;
    for (int b = 0; b < 4; b++) slot[b*256 +: 256] = tmem.get_line(T_BASE + (k/5)*128 + b*32);
    return trace_rec_t'(slot[(k%5)*200 +: 200]);
  endfunction

  function automatic logic signed [7:0] fold(input logic [31:0] v);
    return 8'(int'((v ^ (v >> 7) ^ (v >> 15)) % 81) - 40);
  endfunction

  // 13 features: PC[63:42],[41:20],[19:0]; addr likewise; opclass; 3 x reg
  function automatic void host_features(input trace_rec_t r, input int i);
    feat[i][0]  = fold(32'(r.pc[63:42]));    feat[i][1] = fold(32'(r.pc[41:20]));
    feat[i][2]  = fold(32'(r.pc[19:0]));     feat[i][3] = fold(32'(r.maddr[63:42]));
    feat[i][4]  = fold(32'(r.maddr[41:20])); feat[i][5] = fold(32'(r.maddr[19:0]));
    feat[i][6]  = 8'(int'(r.opclass) - 20);
    feat[i][7]  = 8'(r.src1.cls * 8 - 12);   feat[i][8] = 8'(int'(r.src1.num) - 16);
    feat[i][9]  = 8'(r.src2.cls * 8 - 12);   feat[i][10] = 8'(int'(r.src2.num) - 16);
    feat[i][11] = 8'(r.dst.cls * 8 - 12);    feat[i][12] = 8'(int'(r.dst.num) - 16);
  endfunction

  task automatic do_cmd(input bit is_w, input longint addr, input int len);
    @(negedge clk);
    acc_cmd_valid = 1; acc_cmd_is_w = is_w; acc_cmd_addr = addr; acc_cmd_len = len;
    @(negedge clk);
    acc_cmd_valid = 0;
    while (!acc_cmd_done) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    longint t0, t1, t_step;
    int n_long, n_short, nflush, wt, n_written;
    n_pause = 0; n_stall = 0; n_tc_bp = 0; n_acc_bp = 0; n_groups5 = 0; max_run = 0; run = 0;
    n_retired = 0;
    for (int i = 0; i < 5; i++) ret_rec[i] = '0;
    repeat (10) @(negedge clk);
    rst_n = 1;
    // ---------------- 1. trace collection ----------------
    @(negedge clk);
    tc_arm = 1;
    @(negedge clk);
    tc_arm = 0;
    tmem.hold_writes(1500);                   // memory busy: the FIFO fills
    core_on = 1;
    wt = 0;
    while (!tc_done && wt < 200000) begin @(negedge clk); wt++; end
    core_on = 0;
    check(tc_done, "collector finished the epoch");
    check(tc_count == EPOCH, $sformatf("instructions counted %0d", tc_count));
    check(traced.size() == EPOCH, "core model saw the epoch");
    for (int k = 0; k < EPOCH; k++)
      check(mem_rec(k) == traced[k], $sformatf("trace record %0d", k));
    nflush = 0;
    for (int k = EPOCH; k < ((EPOCH + 4) / 5) * 5; k++) begin
      check(mem_rec(k) == '0, "padding record is zero");
      nflush++;
    end
    check(tmem.get_line(T_BASE + ((EPOCH + 4) / 5) * 128) == '0, "nothing written past the epoch");
    $display("INFO trace: %0d retired, %0d traced, pause %0d, stall %0d cycles, max FIFO level seen at end %0d",
             n_retired, EPOCH, n_pause, n_stall, tc_level);

    // ---------------- 2. host: features and weights ----------------
    feat = new[NI];
    for (int i = 0; i < NI; i++) host_features(mem_rec(i), i);
    rand_weights(3);
    shape_heads();
    ref_run(NI, 576, 64);
    balance_classes(NI, 576, 64);
    for (int r = 0; r < GW_USED; r++) begin
      logic [2047:0] row;
      row = weight_row(r);
      for (int b = 0; b < 8; b++) amem.put_line(W_BASE + r*256 + b*32, row[b*256 +: 256]);
    end
    for (int i = 0; i < NI; i += 2) begin
      logic [255:0] l;
      l = '0;
      l[0 +: 104] = feat_word(i);
      l[128 +: 104] = feat_word(i + 1);
      amem.put_line(X_BASE + i*16, l);
    end
    do_cmd(1, W_BASE, GW_USED);
    do_cmd(0, X_BASE, NI);
    check(dut.u_acc.u_gib.mem[NI-1] == feat_word(NI-1), "features loaded");

    // ---------------- 3. inference ----------------
    @(negedge clk);
    acc_n_instr = NI; acc_start = 1; t0 = $time;
    @(negedge clk);
    acc_start = 0;
    // measure one instruction step of the first window
    while (dut.u_acc.u_ctl.cp.t != 1) @(negedge clk);
    t_step = $time;
    while (dut.u_acc.u_ctl.cp.t != 2) @(negedge clk);
    t_step = ($time - t_step) / 10;
    // hold the result memory while the first predictions come out
    while (dut.u_acc.u_ctl.cp.t != 256) @(negedge clk);
    amem.hold_writes(30000);
    while (!acc_done) @(negedge clk);
    t1 = $time;
    repeat (50) @(negedge clk);

    n_long = 0; n_short = 0; n_written = 0;
    for (int i = 0; i < NI; i++) begin
      logic [31:0] w;
      w = amem.get_word(R_BASE + i*4);
      if (pred_val.exists(i)) begin
        check(w[16] == pred_cls[i], $sformatf("class of instruction %0d", i));
        check($signed(w[15:0]) == 16'(pred_val[i]) && w[31:17] == 0,
              $sformatf("value of instruction %0d: %0d vs %0d", i, $signed(w[15:0]), pred_val[i]));
        if (pred_cls[i]) n_long++; else n_short++;
        n_written++;
      end else check(w == 0, $sformatf("no result for instruction %0d", i));
    end
    check(pred_val.num() == 128, "two windows of 64 predictions");
    check(max_run == 256, $sformatf("256-cycle matrix product, got %0d", max_run));
    check(acc_n_mac_ops == 2*(576*17 + 64*3), $sformatf("MAC operations %0d", acc_n_mac_ops));

    // ---------------- mechanisms ----------------
    check(n_pause > 0, "process switch paused tracing");
    check(n_stall > 0, "FIFO full stalled retirement");
    check(nflush > 0, "partial entry flushed");
    check(n_tc_bp > 0, "collector write back-pressure");
    check(n_acc_bp > 0, "accelerator write back-pressure");
    check(n_groups5 > 0, "five instructions taken in one cycle");
    check(acc_n_weight_waits > 0, "weight staging waits");
    check(acc_n_res_stalls > 0, "result stalls");
    check(n_long > 0 && n_short > 0, $sformatf("both classes (%0d long, %0d short)", n_long, n_short));
    $display("INFO inference: %0d cycles for %0d instructions, %0d cycles per instruction step",
             (t1 - t0) / 10, NI, t_step);
    $display("INFO mechanisms: pause %0d, fifo stall %0d, flush %0d, tc bp %0d, acc bp %0d, weight waits %0d, result stalls %0d",
             n_pause, n_stall, nflush, n_tc_bp, n_acc_bp, acc_n_weight_waits, acc_n_res_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
