// trace_collector: lightweight hardware that records the instructions retiring
// from the processor's reorder buffer during one sampled epoch and writes the
// records to system memory.
//
// Operation. Software arms the collector with the process id to trace, the
// epoch length (100,000 instructions in the paper's deployment) and a base
// address in OS-managed memory. While armed and while the running process id
// equals the target, every retiring instruction (up to RET_W per cycle, in
// program order from lane 0) is captured as a 200-bit record of the six
// features. When the process is switched out, capture pauses and resumes on
// the next switch-in, so the trace holds only the target process. Records are
// packed five to an entry into trace_fifo (512 entries). The FIFO's output is
// drained entry by entry to memory as four 256-bit writes to consecutive
// addresses (an entry is 1000 bits padded to 128 bytes). If the FIFO is full,
// ret_ready drops: the core must hold retirement, which stalls its front end.
// When the epoch count is reached a partly filled entry is flushed, padded with
// all-zero records; done is raised once the last write has been accepted.
//
// What follows the paper: a FIFO at the ROB retire stage, 512 entries of five
// instructions, process-id gating, stall on full, draining through the memory
// hierarchy, the epoch of a fixed instruction count. This design's choices:
// the record layout, the retire width of 5, the memory-write handshake, the
// 128-byte entry slot and the zero padding at the end of an epoch.
//
// Timing: a retirement group is taken in the cycle ret_valid and ret_ready are
// both high; it is in the FIFO one cycle later and in memory a few cycles
// after that, limited by mem_wr_ready.
module trace_collector
  import ns_pkg::*;
#(
  parameter int RET_W     = 5,     // retire lanes per cycle
  parameter int PER_ENTRY = 5,     // records per FIFO entry
  parameter int DEPTH     = 512,   // FIFO entries
  parameter int PID_W     = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration, from the driver
  input  logic               cfg_arm,          // pulse: start a new epoch
  input  logic [PID_W-1:0]   cfg_target_pid,
  input  logic [31:0]        cfg_epoch_len,    // instructions per epoch
  input  logic [MEM_AW-1:0]  cfg_base_addr,    // 128-byte aligned
  input  logic [PID_W-1:0]   cur_pid,          // process now scheduled
  // ROB retire port
  input  logic [RET_W-1:0]   ret_valid,        // lanes 0..k-1 valid
  input  trace_rec_t         ret_rec [RET_W],
  output logic               ret_ready,
  output logic               stall,            // FIFO full while tracing
  // system memory write port
  output logic               mem_wr_valid,
  output mem_wr_t            mem_wr,
  input  logic               mem_wr_ready,
  // status
  output logic               active,           // tracing this cycle
  output logic               armed,
  output logic               done,             // epoch complete and written
  output logic [31:0]        instr_count,
  output logic [$clog2(DEPTH):0] fifo_level       // FIFO entries in use
);
  localparam int ENTRY_BITS = PER_ENTRY * REC_BITS;
  localparam int SLOT_BEATS = 4;                      // 128 B per entry slot
  localparam int SLOT_BITS  = SLOT_BEATS * MEM_W;
  localparam int NCOMB      = PER_ENTRY - 1 + RET_W;
  localparam int CW         = $clog2(NCOMB + 1);

  // ---------------- capture and packing ----------------
  trace_rec_t pend [PER_ENTRY-1];
  logic [CW-1:0] n_pend;
  trace_rec_t comb [NCOMB];
  logic [CW-1:0] n_lanes, take, total;
  logic [31:0]   remaining;
  logic          fifo_full, fifo_empty, fifo_push, fifo_pop;
  logic [ENTRY_BITS-1:0] fifo_wdata, fifo_rdata;
  logic          accept, flush, epoch_reached;

  assign epoch_reached = armed && (instr_count == cfg_epoch_len);
  assign active    = armed && !epoch_reached && (cur_pid == cfg_target_pid);
  assign ret_ready = !active || !fifo_full;
  assign stall     = active && fifo_full;
  assign accept    = active && !fifo_full;
  assign remaining = cfg_epoch_len - instr_count;

  always_comb begin
    n_lanes = '0;
    for (int i = 0; i < RET_W; i++) if (ret_valid[i]) n_lanes = CW'(i + 1);
    if (!accept)                          take = '0;
    else if (32'(n_lanes) > remaining)    take = CW'(remaining);
    else                                  take = n_lanes;
    total = n_pend + take;
    for (int i = 0; i < NCOMB; i++) comb[i] = '0;
    for (int i = 0; i < NCOMB; i++) begin
      if (i < int'(n_pend)) comb[i] = pend[i];
      else if (i - int'(n_pend) < RET_W && i - int'(n_pend) < int'(take))
        comb[i] = ret_rec[i - int'(n_pend)];
    end
  end

  // flush a partial entry once the whole epoch has been captured
  assign flush = epoch_reached && (n_pend != '0) && !fifo_full;
  assign fifo_push = (total >= CW'(PER_ENTRY)) || flush;

  always_comb begin
    fifo_wdata = '0;
    for (int i = 0; i < PER_ENTRY; i++) fifo_wdata[i*REC_BITS +: REC_BITS] = comb[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed       <= 1'b0;
      instr_count <= '0;
      n_pend      <= '0;
      for (int i = 0; i < PER_ENTRY-1; i++) pend[i] <= '0;
    end else if (cfg_arm) begin
      armed       <= 1'b1;
      instr_count <= '0;
      n_pend      <= '0;
    end else begin
      instr_count <= instr_count + 32'(take);
      if (flush) n_pend <= '0;
      else if (total >= CW'(PER_ENTRY)) begin
        n_pend <= total - CW'(PER_ENTRY);
        for (int i = 0; i < PER_ENTRY-1; i++)
          pend[i] <= (i + PER_ENTRY < NCOMB) ? comb[(i + PER_ENTRY) % NCOMB] : '0;
      end else begin
        n_pend <= total;
        for (int i = 0; i < PER_ENTRY-1; i++) pend[i] <= comb[i];
      end
    end
  end

  trace_fifo #(.DEPTH(DEPTH), .WIDTH(ENTRY_BITS)) u_fifo (
    .clk, .rst_n,
    .wr_en(fifo_push), .wr_data(fifo_wdata),
    .rd_en(fifo_pop),  .rd_data(fifo_rdata),
    .full(fifo_full),  .empty(fifo_empty), .count(fifo_level)
  );

  // ---------------- drain to memory ----------------
  logic [SLOT_BITS-1:0] dbuf;
  logic [1:0]           beat;
  logic                 draining;
  logic [MEM_AW-1:0]    wptr;

  assign fifo_pop     = !draining && !fifo_empty;
  assign mem_wr_valid = draining;
  assign mem_wr.addr  = wptr + MEM_AW'({beat, 5'b0});
  assign mem_wr.data  = dbuf[beat*MEM_W +: MEM_W];
  assign mem_wr.strb  = (beat == 2'd3) ? {3'b000, {(MEM_W/8-3){1'b1}}} : '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dbuf     <= '0;
      beat     <= '0;
      draining <= 1'b0;
      wptr     <= '0;
    end else begin
      if (cfg_arm) wptr <= cfg_base_addr;
      if (fifo_pop) begin
        dbuf     <= SLOT_BITS'(fifo_rdata);
        beat     <= '0;
        draining <= 1'b1;
      end else if (draining && mem_wr_ready) begin
        beat <= beat + 2'd1;
        if (beat == 2'(SLOT_BEATS-1)) begin
          draining <= 1'b0;
          wptr     <= wptr + MEM_AW'(SLOT_BITS/8);
        end
      end
    end
  end

  assign done = epoch_reached && (n_pend == '0) && fifo_empty && !draining;

  // retirement lanes are filled from lane 0 in program order
  a_thermometer: assert property (@(posedge clk) disable iff (!rst_n)
    ((ret_valid & (ret_valid + RET_W'(1))) == '0));
  // a push is never attempted into a full FIFO
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(fifo_push && fifo_full));
endmodule
