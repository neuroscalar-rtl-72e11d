// tb_trace_collector: self-checking test of the trace collector at its default
// size (5 retire lanes, 512-entry FIFO of five records).
//
// A core model retires groups of 0..5 instructions (holding a group while
// ret_ready is low) and switches between the traced process and another one.
// Two epochs are collected: a long one (3003 instructions, not a multiple of
// five) with the memory refusing writes for 1600 cycles so the FIFO fills,
// and a short second epoch at another base address to check re-arming. Checks:
// the memory image holds exactly the target's records in order, padding
// records are zero, nothing is written past the epoch, the instruction count,
// the done flag, ret_ready low only while the FIFO is full, and that while
// the FIFO has room a five-wide group is taken in one cycle (rate: RET_W
// instructions per cycle). Pause, stall and flush must each happen.
module tb_trace_collector;
  import ns_pkg::*;
  localparam int TPID = 9, OPID = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_arm = 0, ret_ready, stall, mem_wr_valid, mem_wr_ready, active, armed, done;
  logic [15:0] cfg_target_pid = TPID, cur_pid = TPID;
  logic [31:0] cfg_epoch_len = '0, instr_count;
  logic [MEM_AW-1:0] cfg_base_addr = '0;
  logic [4:0] ret_valid = '0;
  trace_rec_t ret_rec [5];
  mem_wr_t mem_wr;
  logic [9:0] fifo_level;

  trace_collector dut (.*);

  logic rq_ready, rs_valid;
  logic [MEM_W-1:0] rs_data;
  tb_sysmem #(.RD_LAT(2), .STALL_PCT(25)) mem (
    .clk, .rd_req_valid(1'b0), .rd_req_addr('0), .rd_req_ready(rq_ready),
    .rd_resp_valid(rs_valid), .rd_resp_data(rs_data),
    .wr_valid(mem_wr_valid), .wr(mem_wr), .wr_ready(mem_wr_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  int n_pause = 0, n_stall = 0, n_five = 0, n_flush = 0;
  trace_rec_t traced [$];
  bit core_on = 0;
  int pid_timer = 0;

  function automatic trace_rec_t rnd_rec();
    trace_rec_t r;
    r = '0;
    r.pc = {$urandom, $urandom}; r.maddr = {$urandom, $urandom};
    r.opclass = 8'($urandom); r.src1 = 12'($urandom); r.src2 = 12'($urandom); r.dst = 12'($urandom);
    return r;
  endfunction

  always @(negedge clk) begin
    if (core_on) begin
      if (ret_valid == 0 || ret_ready) begin
        int n;
        n = ($urandom_range(2, 0) == 0) ? 5 : $urandom_range(5, 0);
        ret_valid = 5'((1 << n) - 1);
        for (int i = 0; i < 5; i++) ret_rec[i] = rnd_rec();
      end
      pid_timer++;
      if (cur_pid == TPID && pid_timer >= 200) begin cur_pid = OPID; pid_timer = 0; end
      else if (cur_pid == OPID && pid_timer >= 40) begin cur_pid = TPID; pid_timer = 0; end
    end else ret_valid = '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (armed && !done && cur_pid != TPID && ret_valid != 0) n_pause++;
    if (stall) n_stall++;
    check(ret_ready == !(active && fifo_level == 10'd512), "ret_ready low only when full");
    if (active && ret_ready && ret_valid == 5'h1f && int'(instr_count) + 5 <= int'(cfg_epoch_len)) begin
      n_five++;
      // the whole group is counted one cycle later
    end
    if (ret_valid != 0 && ret_ready && armed && cur_pid == TPID)
      for (int i = 0; i < 5; i++)
        if (ret_valid[i] && traced.size() < int'(cfg_epoch_len)) traced.push_back(ret_rec[i]);
  end

  function automatic trace_rec_t mem_rec(input longint base, input int k);
    logic [1023:0] slot;
    for (int b = 0; b < 4; b++) slot[b*256 +: 256] = mem.get_line(base + (k/5)*128 + b*32);
    return trace_rec_t'(slot[(k%5)*200 +: 200]);
  endfunction

  task automatic epoch(input int len, input longint base, input int hold);
    int wt;
    traced.delete();
    @(negedge clk);
    cfg_epoch_len = len; cfg_base_addr = base; cfg_arm = 1;
    @(negedge clk);
    cfg_arm = 0;
    check(armed && instr_count == 0, "armed with zero count");
    if (hold > 0) mem.hold_writes(hold);
    core_on = 1;
    wt = 0;
    while (!done && wt < 100000) begin @(negedge clk); wt++; end
    core_on = 0;
    check(done, "epoch done");
    check(instr_count == len, $sformatf("count %0d", instr_count));
    check(traced.size() == len, "model saw the epoch");
    for (int k = 0; k < len; k++) check(mem_rec(base, k) == traced[k], $sformatf("record %0d", k));
    for (int k = len; k < ((len + 4) / 5) * 5; k++) begin
      check(mem_rec(base, k) == '0, "padding record");
      n_flush++;
    end
    check(mem.get_line(base + ((len + 4) / 5) * 128) == '0, "nothing past the epoch");
    repeat (20) @(negedge clk);
    check(done, "done stays high");
  endtask

  initial begin
    for (int i = 0; i < 5; i++) ret_rec[i] = '0;
    repeat (10) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(!armed && !active && ret_ready, "idle after reset");
    epoch(3003, 64'h1000_0000, 1600);
    epoch(37, 64'h2000_0080, 0);
    check(n_pause > 0, "pause on process switch");
    check(n_stall > 0, "stall on full FIFO");
    check(n_flush > 0, "partial entry flushed");
    check(n_five > 0, "five instructions in one cycle");
    $display("INFO pause %0d, stall %0d, flush %0d, five-wide groups %0d", n_pause, n_stall, n_flush, n_five);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
