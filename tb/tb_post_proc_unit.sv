// tb_post_proc_unit: self-checking test of the post-processing unit against
// the reference arithmetic of tb_ref_pkg.
//
// The test holds the unit's partial-sum input and a small model of the tile
// input buffer (registered row read, row write). For 200 random operations it
// loads random biases into either bias half, drives random partial sums and
// runs PP_ID, PP_RELU, PP_SIG, PP_TANH, PP_CELL (on random gate rows, both
// layers, so the cell state carries across calls), PP_EMIT and PP_CLR. It
// compares every written row, the cell state (through the h it produces) and
// the emitted class and value with the reference, and checks the latency from
// start to done: 17 cycles for an activation row (16 chunks of 16 plus the
// write), 22 for the cell update (4 gate-row reads, 16 chunks, the write),
// 1 for the heads and for the state clear (clock edges after the start edge).
module tb_post_proc_unit;
  import ns_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, layer = 0, bias_half = 0, busy, done;
  pp_op_e op = PP_NONE;
  logic [5:0] dst_row = '0;
  logic bias_we = 0, bias_whalf = 0;
  logic [2047:0] bias_wdata = '0;
  acc_t acc [256];
  logic tib_re, tib_we;
  logic [5:0] tib_rrow, tib_wrow;
  logic [2047:0] tib_rdata, tib_wdata;
  logic res_valid, res_cls;
  logic signed [15:0] res_val;

  post_proc_unit dut (.clk, .rst_n, .start, .op, .layer, .dst_row, .bias_half, .busy, .done,
    .bias_we, .bias_whalf, .bias_wdata, .acc, .tib_re, .tib_rrow, .tib_rdata, .tib_we,
    .tib_wrow, .tib_wdata, .res_valid, .res_cls, .res_val);

  // tile input buffer model
  logic [2047:0] tib [64];
  always @(posedge clk) begin
    if (tib_re) tib_rdata <= tib[tib_rrow];
    if (tib_we) tib[tib_wrow] <= tib_wdata;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int c_model [2][256];
  logic [2047:0] bias_m [2];
  bit emit_seen; bit emit_cls; logic signed [15:0] emit_val;
  always @(posedge clk) if (res_valid) begin emit_seen <= 1; emit_cls <= res_cls; emit_val <= res_val; end

  function automatic int b8(input logic [2047:0] r, input int j);
    return int'($signed(r[j*8 +: 8]));
  endfunction

  task automatic run_op(input pp_op_e o, input bit l, input bit bh, input int dst,
                        output int cycles);
    @(negedge clk);
    op = o; layer = l; bias_half = bh; dst_row = 6'(dst); start = 1;
    @(negedge clk);
    start = 0; cycles = 0;
    while (!done) begin @(negedge clk); cycles++; if (cycles > 100) break; end
    @(negedge clk);
  endtask

  initial begin
    int cyc, n_ops [8];
    for (int j = 0; j < 256; j++) acc[j] = '0;
    for (int i = 0; i < 8; i++) n_ops[i] = 0;
    for (int l = 0; l < 2; l++) for (int j = 0; j < 256; j++) c_model[l][j] = 0;
    bias_m[0] = '0; bias_m[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      int kind, bh, l;
      // new bias into a random half
      bh = $urandom_range(1, 0);
      @(negedge clk);
      bias_we = 1; bias_whalf = bh[0];
      for (int j = 0; j < 256; j += 4) bias_wdata[j*8 +: 32] = $urandom;
      bias_m[bh] = bias_wdata;
      @(negedge clk);
      bias_we = 0;
      // random sums: mostly small, sometimes large enough to saturate
      for (int j = 0; j < 256; j++)
        acc[j] = ($urandom_range(3, 0) == 0) ? acc_t'($urandom) : acc_t'(int'($urandom_range(16000, 0)) - 8000);
      kind = (it < 8) ? it % 7 : $urandom_range(6, 0);
      l = $urandom_range(1, 0);
      case (kind)
        0, 1, 2, 3: begin
          pp_op_e o;
          int dst;
          o = (kind == 0) ? PP_ID : (kind == 1) ? PP_RELU : (kind == 2) ? PP_SIG : PP_TANH;
          dst = 4 + $urandom_range(40, 0);
          run_op(o, 0, bh[0], dst, cyc);
          check(cyc == 17, $sformatf("activation latency %0d", cyc));
          for (int j = 0; j < 256; j++)
            check(b8(tib[dst], j) == ref_act(acc[j], b8(bias_m[bh], j), kind),
                  $sformatf("op %0d element %0d", kind, j));
        end
        4: begin
          // random gate rows: i, f, o in [0, 32], g in [-32, 32]
          for (int g = 0; g < 4; g++)
            for (int j = 0; j < 256; j++)
              tib[TIB_ROW_G + g][j*8 +: 8] = 8'((g == 2) ? int'($urandom_range(64, 0)) - 32
                                                          : int'($urandom_range(32, 0)));
          run_op(PP_CELL, l[0], 0, (l == 0) ? TIB_ROW_H0 : TIB_ROW_H1, cyc);
          check(cyc == 22, $sformatf("cell latency %0d", cyc));
          for (int j = 0; j < 256; j++) begin
            int cn, h;
            cn = rsat((longint'(b8(tib[TIB_ROW_G+1], j)) * c_model[l][j] +
                       longint'(b8(tib[TIB_ROW_G], j)) * b8(tib[TIB_ROW_G+2], j)) >>> 5, -32768, 32767);
            c_model[l][j] = cn;
            h = rsat((longint'(b8(tib[TIB_ROW_G+3], j)) * ref_tanh(rsat(cn, -128, 127))) >>> 5, -128, 127);
            check(b8(tib[(l == 0) ? TIB_ROW_H0 : TIB_ROW_H1], j) == h, $sformatf("cell element %0d", j));
            check(dut.cst[l][j] == 16'(cn), "cell state");
          end
        end
        5: begin
          longint lg0, lg1, rs, rl;
          emit_seen = 0;
          run_op(PP_EMIT, 0, bh[0], 0, cyc);
          check(cyc == 1, $sformatf("emit latency %0d", cyc));
          lg0 = acc[0] + b8(bias_m[bh], 0) * 64; lg1 = acc[1] + b8(bias_m[bh], 1) * 64;
          rs  = acc[2] + b8(bias_m[bh], 2) * 64; rl  = acc[3] + b8(bias_m[bh], 3) * 64;
          check(emit_seen, "result emitted");
          check(emit_cls == (lg1 > lg0), "emitted class");
          check(emit_val == 16'(rsat(((lg1 > lg0) ? rl : rs) >>> 6, -32768, 32767)), "emitted value");
        end
        6: begin
          tib[TIB_ROW_H0] = '1; tib[TIB_ROW_H1] = '1;
          run_op(PP_CLR, 0, 0, 0, cyc);
          check(cyc == 1, $sformatf("clear latency %0d", cyc));
          check(tib[TIB_ROW_H0] == '0 && tib[TIB_ROW_H1] == '0, "hidden rows cleared");
          for (int ll = 0; ll < 2; ll++) for (int j = 0; j < 256; j++) c_model[ll][j] = 0;
          check(dut.cst[0][7] == 0 && dut.cst[1][200] == 0, "cell state cleared");
        end
        default: ;
      endcase
      n_ops[kind]++;
    end
    for (int k = 0; k < 7; k++) check(n_ops[k] > 0, $sformatf("operation %0d exercised", k));
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
