// tb_accumulation_buffer: self-checking test of the 256-entry INT32
// accumulation buffer.
//
// The test feeds sums of random signed 16-bit products: each sum starts with a
// clear-flagged product and has a random length (up to 300 terms, with gaps
// where in_valid is low), and a 32-bit model checks all 256 partial sums after
// every cycle. A long sum of extreme products (-32768 * 256 terms) checks that
// no bits are lost. Rate: one product per entry per cycle, so a sum of K terms
// is complete K cycles after its first term.
module tb_accumulation_buffer;
  import ns_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_clr = 0;
  logic signed [15:0] prod [256];
  acc_t acc [256];
  acc_t model [256];

  accumulation_buffer dut (.clk, .rst_n, .in_valid, .in_clr, .prod, .acc);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic feed(input bit v, input bit c, input bit extreme);
    in_valid = v; in_clr = c;
    for (int j = 0; j < 256; j++) prod[j] = extreme ? -16'sd32768 : 16'($urandom);
    if (v) for (int j = 0; j < 256; j++) model[j] = (c ? 0 : model[j]) + acc_t'(prod[j]);
    @(negedge clk);
    for (int j = 0; j < 256; j++) check(acc[j] == model[j], $sformatf("sum %0d", j));
  endtask

  initial begin
    for (int j = 0; j < 256; j++) begin prod[j] = '0; model[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < 256; j++) check(acc[j] == 0, "reset clears the sums");
    for (int s = 0; s < 40; s++) begin
      int k;
      k = $urandom_range(300, 1);
      for (int t = 0; t < k; t++) begin
        while ($urandom_range(4, 0) == 0) feed(0, 0, 0);
        feed(1, t == 0, 0);
      end
    end
    for (int t = 0; t < 256; t++) feed(1, t == 0, 1);
    check(acc[0] == -32'sd8388608, "256 extreme products");
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
