// ns_pkg: types and constants shared by the trace collector and the Neutrino
// inference accelerator.
//
// Trace side: one trace record describes one retired instruction with the six
// microarchitecture-independent properties (PC, memory address, opcode class,
// source registers 1 and 2, destination register; registers as class+number).
// The record is 200 bits (25 bytes), which is the per-instruction size implied
// by 2.5MB for a 100,000-instruction epoch. Field widths other than the two
// 64-bit addresses are this design's choice.
//
// Accelerator side: hidden size 256 matches the 256-wide INT8 vector engine
// (16 lanes x 16). Activations are INT8 with FRAC_A fraction bits, weights INT8
// with FRAC_W fraction bits, partial sums INT32; the fixed-point formats, the
// rounding and the activation tables are this design's choice. The activation
// tables are computed at elaboration: SIG_LUT[v] = round(2^FRAC_A * sigmoid(v /
// 2^FRAC_A)) and TANH_LUT[v] = round(2^FRAC_A * tanh(v / 2^FRAC_A)), indexed by
// the INT8 input plus 128.
//
// The weight layout of the global weight buffer (rows of 256 INT8 weights, one
// row per input element, i.e. each weight matrix stored transposed) is fixed
// here so that the host, the schedule and the testbenches agree on it.
//
// Some constants (LANES, ROW_BITS, GW_USED) are not used by every module that
// imports the package; they document the geometry and are used by the
// testbenches and the host-side layout.
package ns_pkg;

  // ---------------- trace records ----------------
  typedef struct packed {
    logic [3:0] cls;   // register class
    logic [7:0] num;   // register number
  } reg_id_t;

  typedef struct packed {
    logic [27:0] rsvd;     // zero, pads the record to 25 bytes
    logic [63:0] pc;
    logic [63:0] maddr;    // full memory address, 0 for non-memory ops
    logic [7:0]  opclass;
    reg_id_t     src1;
    reg_id_t     src2;
    reg_id_t     dst;
  } trace_rec_t;

  localparam int REC_BITS = $bits(trace_rec_t);  // 200

  // ---------------- system memory write channel ----------------
  localparam int MEM_W  = 256;          // memory data bus width (bits)
  localparam int MEM_AW = 64;           // byte address width

  typedef struct packed {
    logic [MEM_AW-1:0]  addr;           // byte address, MEM_W/8 aligned
    logic [MEM_W-1:0]   data;
    logic [MEM_W/8-1:0] strb;           // byte enables
  } mem_wr_t;

  // ---------------- accelerator datapath ----------------
  localparam int H        = 256;        // hidden size = vector width
  localparam int LANES    = 16;         // MAC lanes
  localparam int LANE_W   = 16;         // MACs per lane
  localparam int NFEAT    = 13;         // features per instruction
  localparam int FRAC_A   = 5;          // activation fraction bits
  localparam int FRAC_W   = 6;          // weight fraction bits
  localparam int ROW_BITS = H * 8;      // one weight / activation row

  typedef logic signed [7:0]  act_t;
  typedef logic signed [31:0] acc_t;

  // tile input buffer rows used by the schedule
  localparam int TIB_ROW_X  = 0;        // raw features of the current instruction
  localparam int TIB_ROW_XT = 1;        // projected input
  localparam int TIB_ROW_H0 = 2;        // hidden state, layer 0
  localparam int TIB_ROW_H1 = 3;        // hidden state, layer 1
  localparam int TIB_ROW_G  = 4;        // gates i,f,g,o at rows 4..7
  localparam int TIB_ROW_Z  = 8;        // classifier hidden layer (64 used)

  // post-processing operations
  typedef enum logic [2:0] {
    PP_NONE = 3'd0,   // leave partial sums in the accumulation buffer
    PP_ID   = 3'd1,   // bias, requantise
    PP_RELU = 3'd2,   // bias, requantise, ReLU
    PP_SIG  = 3'd3,   // bias, requantise, sigmoid
    PP_TANH = 3'd4,   // bias, requantise, tanh
    PP_EMIT = 3'd5,   // heads: class from lanes 0/1, regressor from lane 2 or 3
    PP_CELL = 3'd6,   // LSTM cell update from the gate rows
    PP_CLR  = 3'd7    // zero hidden and cell state (new window)
  } pp_op_e;

  // ---------------- global weight buffer layout ----------------
  localparam int GW_PROJ    = 0;                  // 13 rows: input projection
  localparam int GW_PROJ_B  = 13;                 // bias row
  localparam int GW_L0      = 14;                 // layer base
  localparam int GW_LAYER   = 2052;               // rows per layer
  localparam int GW_FC1     = GW_L0 + 2*GW_LAYER; // 256 rows, outputs 0..63
  localparam int GW_FC1_B   = GW_FC1 + 256;
  localparam int GW_FC2     = GW_FC1_B + 1;       // 64 rows, outputs 0..1
  localparam int GW_REG     = GW_FC2 + 64;        // 256 rows, outputs 2 (short), 3 (long)
  localparam int GW_HEAD_B  = GW_REG + 256;       // bias row of outputs 0..3
  localparam int GW_USED    = GW_HEAD_B + 1;      // 4696 rows in use

  // W_ih of gate g (order i,f,g,o) of layer l; W_hh follows 256 rows later;
  // the four gate biases (b_ih + b_hh) follow the eight matrices.
  function automatic int gw_wih(input int l, input int g);
    return GW_L0 + l*GW_LAYER + g*512;
  endfunction
  function automatic int gw_whh(input int l, input int g);
    return GW_L0 + l*GW_LAYER + g*512 + 256;
  endfunction
  function automatic int gw_bias(input int l, input int g);
    return GW_L0 + l*GW_LAYER + 2048 + g;
  endfunction

  // ---------------- fixed-point helpers ----------------
  function automatic act_t sat8(input logic signed [31:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return act_t'(v);
  endfunction

  function automatic logic signed [15:0] sat16(input logic signed [31:0] v);
    if (v > 32767)       return 16'sh7fff;
    else if (v < -32768) return 16'sh8000;
    else                 return 16'(v);
  endfunction

  typedef logic signed [7:0] lut_t [256];

  function automatic int round_real(input real x);
    return (x >= 0.0) ? $rtoi(x + 0.5) : -$rtoi(-x + 0.5);
  endfunction

  function automatic lut_t gen_sig_lut();
    lut_t l;
    for (int i = 0; i < 256; i++) begin
      real v;
      v = real'(i - 128) / real'(1 << FRAC_A);
      l[i] = 8'(round_real(real'(1 << FRAC_A) / (1.0 + $exp(-v))));
    end
    return l;
  endfunction

  function automatic lut_t gen_tanh_lut();
    lut_t l;
    for (int i = 0; i < 256; i++) begin
      real v, e;
      v = real'(i - 128) / real'(1 << FRAC_A);
      e = $exp(2.0 * v);
      l[i] = 8'(round_real(real'(1 << FRAC_A) * (e - 1.0) / (e + 1.0)));
    end
    return l;
  endfunction

  localparam lut_t SIG_LUT  = gen_sig_lut();
  localparam lut_t TANH_LUT = gen_tanh_lut();

endpackage
