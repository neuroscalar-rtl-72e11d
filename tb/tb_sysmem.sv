// tb_sysmem: behavioural model of system memory for the testbenches (not part
// of the design).
//
// Storage is a sparse array of 32-byte lines. The read channel accepts a
// request when rd_req_ready is high and answers with one beat RD_LAT cycles
// later (one request in flight). The write channel takes mem_wr with its byte
// strobes whenever wr_ready is high; wr_ready is low for a random share of
// cycles (STALL_PCT percent) and for the cycles set by hold_writes().
// Testbenches preload and inspect memory with put_line/get_line/get_word.
module tb_sysmem
  import ns_pkg::*;
#(
  parameter int RD_LAT    = 3,
  parameter int STALL_PCT = 20
) (
  input  logic               clk,
  input  logic               rd_req_valid,
  input  logic [MEM_AW-1:0]  rd_req_addr,
  output logic               rd_req_ready,
  output logic               rd_resp_valid,
  output logic [MEM_W-1:0]   rd_resp_data,
  input  logic               wr_valid,
  input  mem_wr_t            wr,
  output logic               wr_ready
);
  logic [MEM_W-1:0] lines [longint];
  int               rd_cnt;
  logic [MEM_AW-1:0] rd_addr_q;
  bit               rd_busy;
  int               hold;
  int               n_writes;

  function automatic void put_line(input longint addr, input logic [MEM_W-1:0] d);
    lines[addr >> 5] = d;
  endfunction

  function automatic logic [MEM_W-1:0] get_line(input longint addr);
    if (lines.exists(addr >> 5)) return lines[addr >> 5];
    return '0;
  endfunction

  function automatic logic [31:0] get_word(input longint addr);
    logic [MEM_W-1:0] l;
    l = get_line(addr);
    return l[((addr >> 2) & 7) * 32 +: 32];
  endfunction

  function automatic void hold_writes(input int cycles);
    hold = cycles;
  endfunction

  initial begin
    rd_busy = 0; rd_cnt = 0; hold = 0; n_writes = 0;
    rd_resp_valid = 0; rd_resp_data = '0; rd_req_ready = 1; wr_ready = 1; rd_addr_q = '0;
  end

  always @(posedge clk) begin
    rd_resp_valid <= 1'b0;
    if (rd_req_valid && rd_req_ready) begin
      rd_busy   <= 1;
      rd_cnt    <= RD_LAT;
      rd_addr_q <= rd_req_addr;
      rd_req_ready <= 1'b0;
    end else if (rd_busy) begin
      if (rd_cnt <= 1) begin
        rd_resp_valid <= 1'b1;
        rd_resp_data  <= get_line(longint'(rd_addr_q));
        rd_busy       <= 0;
        rd_req_ready  <= 1'b1;
      end else rd_cnt <= rd_cnt - 1;
    end
    if (wr_valid && wr_ready) begin
      logic [MEM_W-1:0] l;
      l = get_line(longint'(wr.addr));
      for (int b = 0; b < MEM_W/8; b++) if (wr.strb[b]) l[b*8 +: 8] = wr.data[b*8 +: 8];
      put_line(longint'(wr.addr), l);
      n_writes <= n_writes + 1;
    end
    if (hold > 0) begin
      hold <= hold - 1;
      wr_ready <= 1'b0;
    end else wr_ready <= ($urandom_range(99, 0) >= STALL_PCT);
  end
endmodule
