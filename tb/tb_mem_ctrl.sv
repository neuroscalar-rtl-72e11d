// tb_mem_ctrl: self-checking test of the accelerator's memory controller with
// two tiles' result ports.
//
// A memory model with random read latency stalls and write back-pressure
// holds random data. The test issues LOAD_W of 5 rows and LOAD_X of 7
// instructions (odd, so the last 256-bit read carries one instruction) and a
// zero-length command, and checks every global-buffer write (address and data)
// against the memory image, one read in flight at a time, and cmd_done. It
// then emits 40 result pairs with random enables and checks each 32-bit
// result word in memory (address res_base + 4*index, byte strobes leave the
// neighbours intact) and that res_busy covers the pending writes. Rate: a
// weight row needs eight 256-bit reads, a pair of feature words one.
module tb_mem_ctrl;
  import ns_pkg::*;
  localparam int NT = 2;
  localparam longint W_BASE = 64'h2000, X_BASE = 64'h9000, R_BASE = 64'h4_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_is_w = 0, cmd_ready, cmd_done;
  logic [MEM_AW-1:0] cmd_addr = '0, res_base = R_BASE;
  logic [31:0] cmd_len = '0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [MEM_AW-1:0] rd_req_addr;
  logic [MEM_W-1:0] rd_resp_data;
  mem_wr_t mem_wr;
  logic gwb_we, gib_we, res_valid = 0, res_busy;
  logic [12:0] gwb_waddr;
  logic [2047:0] gwb_wdata;
  logic [16:0] gib_waddr;
  logic [103:0] gib_wdata;
  logic [NT-1:0] res_en = '0, res_cls = '0;
  logic [31:0] res_idx [NT];
  logic signed [15:0] res_val [NT];

  mem_ctrl #(.NT(NT)) dut (.*);
  tb_sysmem #(.RD_LAT(4), .STALL_PCT(40)) mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_ready, .rd_resp_valid, .rd_resp_data,
    .wr_valid(mem_wr_valid), .wr(mem_wr), .wr_ready(mem_wr_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  int n_gw = 0, n_gi = 0, n_reads = 0, outstanding = 0;
  always @(posedge clk) if (rst_n) begin
    if (gwb_we) begin
      logic [2047:0] row;
      for (int b = 0; b < 8; b++) row[b*256 +: 256] = mem.get_line(W_BASE + gwb_waddr*256 + b*32);
      check(gwb_wdata == row, $sformatf("weight row %0d", gwb_waddr));
      check(int'(gwb_waddr) == n_gw, "weight rows in order");
      n_gw++;
    end
    if (gib_we) begin
      logic [255:0] l;
      l = mem.get_line(X_BASE + (gib_waddr / 2) * 32);
      check(gib_wdata == l[(gib_waddr % 2) * 128 +: 104], $sformatf("feature word %0d", gib_waddr));
      check(int'(gib_waddr) == n_gi, "feature words in order");
      n_gi++;
    end
    if (rd_req_valid && rd_req_ready) begin n_reads++; outstanding++; end
    if (rd_resp_valid) outstanding--;
    check(outstanding <= 1, "one read in flight");
  end

  task automatic do_cmd(input bit is_w, input longint addr, input int len);
    int wt;
    @(negedge clk);
    check(cmd_ready, "ready for a command");
    cmd_valid = 1; cmd_is_w = is_w; cmd_addr = addr; cmd_len = len;
    @(negedge clk);
    cmd_valid = 0;
    wt = 0;
    while (!cmd_done && wt < 10000) begin @(negedge clk); wt++; end
    check(cmd_done, "command done");
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [31:0] img [int];
    for (int a = 0; a < 5*256; a += 32) begin
      logic [255:0] l;
      for (int i = 0; i < 8; i++) l[i*32 +: 32] = $urandom;
      mem.put_line(W_BASE + a, l);
    end
    for (int a = 0; a < 4*32; a += 32) begin
      logic [255:0] l;
      for (int i = 0; i < 8; i++) l[i*32 +: 32] = $urandom;
      mem.put_line(X_BASE + a, l);
    end
    // neighbours of the result words: known background
    for (int a = 0; a < 512; a += 32) mem.put_line(R_BASE + a, {8{32'hdead_beef}});
    for (int k = 0; k < NT; k++) begin res_idx[k] = '0; res_val[k] = '0; end
    repeat (10) @(negedge clk);
    rst_n = 1;
    do_cmd(1, W_BASE, 5);
    check(n_gw == 5 && n_reads == 40, $sformatf("5 rows in 40 reads (%0d, %0d)", n_gw, n_reads));
    n_reads = 0;
    do_cmd(0, X_BASE, 7);
    check(n_gi == 7 && n_reads == 4, $sformatf("7 features in 4 reads (%0d, %0d)", n_gi, n_reads));
    do_cmd(0, X_BASE, 0);
    check(n_gi == 7, "zero-length command does nothing");
    // results
    for (int a = 0; a < 128; a++) img[a] = 32'hdead_beef;
    for (int e = 0; e < 40; e++) begin
      int wt;
      wt = 0;
      while (res_busy && wt < 1000) begin @(negedge clk); wt++; end
      res_valid = 1;
      for (int k = 0; k < NT; k++) begin
        res_en[k] = $urandom_range(3, 0) != 0;
        res_idx[k] = $urandom_range(127, 0);
        if (k == 1 && res_idx[1] == res_idx[0]) res_idx[1] = (res_idx[0] + 1) % 128;
        res_cls[k] = $urandom_range(1, 0);
        res_val[k] = 16'($urandom);
        if (res_en[k]) img[res_idx[k]] = {15'b0, res_cls[k], res_val[k]};
      end
      @(negedge clk);
      res_valid = 0;
      check(res_busy == (res_en != 0) || mem_wr_ready, "busy while results wait");
    end
    repeat (50) @(negedge clk);
    check(!res_busy, "all results written");
    for (int a = 0; a < 128; a++)
      check(mem.get_word(R_BASE + a*4) == img[a], $sformatf("result word %0d", a));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
