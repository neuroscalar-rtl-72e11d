// tb_vector_mac: self-checking test of the 256-wide INT8 vector MAC (16 lanes
// of 16 multipliers).
//
// Every cycle for 3000 cycles the test drives a random activation, a random
// row of 256 weights (with the extreme values -128 and 127 forced in some
// cycles) and random valid/clear flags. Checks, one cycle later: each of the
// 256 products equals a * w[j] as a signed 16-bit value, out_valid and out_clr
// follow in_valid and in_clr with one cycle of latency, and the products hold
// when in_valid is low. The rate is one 256-wide product per cycle, so 256
// back-to-back inputs must give 256 back-to-back valid outputs.
module tb_vector_mac;
  import ns_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_clr = 0, out_valid, out_clr;
  logic signed [7:0] a = '0;
  logic [2047:0] w = '0;
  logic signed [15:0] prod [256];

  vector_mac dut (.clk, .rst_n, .in_valid, .in_clr, .a, .w, .out_valid, .out_clr, .prod);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int nvalid = 0;
  always @(posedge clk) if (out_valid) nvalid <= nvalid + 1;

  initial begin
    logic signed [15:0] expp [256];
    logic signed [15:0] held [256];
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid, "no output after reset");
    for (int i = 0; i < 3000; i++) begin
      bit v, c;
      v = (i < 256) ? 1 : $urandom_range(3, 0) != 0;
      c = $urandom_range(1, 0);
      in_valid = v; in_clr = c;
      case (i % 10)
        0: a = -8'sd128;
        1: a = 8'sd127;
        default: a = 8'($urandom);
      endcase
      for (int j = 0; j < 256; j += 4) w[j*8 +: 32] = $urandom;
      if (i % 10 < 2) for (int j = 0; j < 256; j += 2) w[j*8 +: 8] = (i % 2) ? 8'h80 : 8'h7f;
      held = prod;
      for (int j = 0; j < 256; j++) expp[j] = 16'(a * $signed(w[j*8 +: 8]));
      @(negedge clk);
      check(out_valid == v, "out_valid latency 1");
      if (v) check(out_clr == c, "out_clr latency 1");
      for (int j = 0; j < 256; j++)
        check(prod[j] == (v ? expp[j] : held[j]), $sformatf("product %0d cycle %0d", j, i));
      if (i == 256) check(nvalid == 256, $sformatf("256 products in 256 cycles, got %0d", nvalid));
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
