// neuroscalar_top: the on-chip part of the NeuroScalar deployment system.
//
// NeuroScalar predicts, instruction by instruction, how many cycles a
// hypothetical processor would take to retire each instruction of a real
// program, using a small LSTM model that sees only microarchitecture-
// independent features (PC, memory address, opcode class, register ids). On
// the user's machine two pieces of hardware make this cheap:
//   * the trace collector, at the ROB of the host core, which records the
//     features of one sampled epoch of the traced process into system memory;
//   * the Neutrino accelerator, which loads that epoch (after host software has
//     turned the records into quantised model features) and runs the model on
//     it from on-chip SRAM.
// The two meet only in system memory, through the host driver, so this top
// simply places both and brings out their memory ports and controls: the core
// retire port and process id, the collector's memory write port, and the
// accelerator's command, read and write ports. Neither the host core nor the
// memory system nor the driver is part of this design.
//
// Parameters: the accelerator's tile count (1 in the main configuration) and
// its window geometry; the collector's retire width. All others are fixed at
// the sizes of the paper in the sub-blocks.
//
// Lint note: rst_n is an asynchronous reset for the flip-flops and is also
// used as the disable condition of the blocks' concurrent assertions, which
// lint reports as a mixed synchronous/asynchronous use; the assertions are
// not hardware.
module neuroscalar_top
  import ns_pkg::*;
#(
  parameter int NT    = 1,
  parameter int SEQ_N = 576,
  parameter int SEQ_R = 64,
  parameter int RET_W = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  // ---- trace collector: driver configuration and host-core retire port
  input  logic                tc_arm,
  input  logic [15:0]         tc_target_pid,
  input  logic [31:0]         tc_epoch_len,
  input  logic [MEM_AW-1:0]   tc_base_addr,
  input  logic [15:0]         cur_pid,
  input  logic [RET_W-1:0]    ret_valid,
  input  trace_rec_t          ret_rec [RET_W],
  output logic                ret_ready,
  output logic                tc_stall,
  output logic                tc_active,
  output logic                tc_done,
  output logic [31:0]         tc_count,
  output logic                tc_armed,
  output logic [9:0]          tc_level,
  output logic                tc_wr_valid,
  output mem_wr_t             tc_wr,
  input  logic                tc_wr_ready,
  // ---- accelerator: driver commands and system memory ports
  input  logic                acc_cmd_valid,
  input  logic                acc_cmd_is_w,
  input  logic [MEM_AW-1:0]   acc_cmd_addr,
  input  logic [31:0]         acc_cmd_len,
  output logic                acc_cmd_ready,
  output logic                acc_cmd_done,
  input  logic                acc_start,
  input  logic [31:0]         acc_n_instr,
  input  logic [MEM_AW-1:0]   acc_res_base,
  output logic                acc_busy,
  output logic                acc_done,
  output logic                acc_rd_req_valid,
  output logic [MEM_AW-1:0]   acc_rd_req_addr,
  input  logic                acc_rd_req_ready,
  input  logic                acc_rd_resp_valid,
  input  logic [MEM_W-1:0]    acc_rd_resp_data,
  output logic                acc_wr_valid,
  output mem_wr_t             acc_wr,
  input  logic                acc_wr_ready,
  output logic [31:0]         acc_n_mac_ops,
  output logic [31:0]         acc_n_weight_waits,
  output logic [31:0]         acc_n_res_stalls
);
  trace_collector #(.RET_W(RET_W)) u_tc (
    .clk, .rst_n,
    .cfg_arm(tc_arm), .cfg_target_pid(tc_target_pid), .cfg_epoch_len(tc_epoch_len),
    .cfg_base_addr(tc_base_addr), .cur_pid,
    .ret_valid, .ret_rec, .ret_ready, .stall(tc_stall),
    .mem_wr_valid(tc_wr_valid), .mem_wr(tc_wr), .mem_wr_ready(tc_wr_ready),
    .active(tc_active), .armed(tc_armed), .done(tc_done), .instr_count(tc_count),
    .fifo_level(tc_level)
  );

  neutrino #(.NT(NT), .SEQ_N(SEQ_N), .SEQ_R(SEQ_R)) u_acc (
    .clk, .rst_n,
    .cmd_valid(acc_cmd_valid), .cmd_is_w(acc_cmd_is_w), .cmd_addr(acc_cmd_addr),
    .cmd_len(acc_cmd_len), .cmd_ready(acc_cmd_ready), .cmd_done(acc_cmd_done),
    .start(acc_start), .n_instr(acc_n_instr), .res_base(acc_res_base),
    .busy(acc_busy), .done(acc_done),
    .rd_req_valid(acc_rd_req_valid), .rd_req_addr(acc_rd_req_addr),
    .rd_req_ready(acc_rd_req_ready), .rd_resp_valid(acc_rd_resp_valid),
    .rd_resp_data(acc_rd_resp_data),
    .mem_wr_valid(acc_wr_valid), .mem_wr(acc_wr), .mem_wr_ready(acc_wr_ready),
    .n_mac_ops(acc_n_mac_ops), .n_weight_waits(acc_n_weight_waits),
    .n_res_stalls(acc_n_res_stalls)
  );
endmodule
