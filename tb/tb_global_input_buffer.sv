// tb_global_input_buffer: self-checking test of global_input_buffer at its full size.
//
// A model array records every write. The test writes random data to random
// addresses (always including the first and last word of the buffer),
// then mixes random reads and writes for 4000 cycles. It checks that read
// data appears exactly one cycle after the read enable, that the output holds
// its value while the enable is low, and that a read and a write of the same
// address in one cycle return the old contents.
module tb_global_input_buffer;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int DW = 104;
  localparam int N  = 1310720/13;
  localparam int AW = $clog2(N);

  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] model [int];

  global_input_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [DW-1:0] rnd_word();
    logic [DW-1:0] v;
    for (int i = 0; i < DW; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [AW-1:0] rnd_addr();
    if ($urandom_range(9, 0) == 0) return AW'(N - 1);
    if ($urandom_range(9, 0) == 0) return '0;
    if (model.num() > 0 && $urandom_range(1, 0) == 0) begin
      int k, i;
      k = $urandom_range(model.num() - 1, 0);
      i = 0;
      foreach (model[a]) begin if (i == k) return AW'(a); i++; end
    end
    return AW'($urandom_range(N - 1, 0));
  endfunction

  initial begin
    logic [DW-1:0] exp_d, held;
    bit exp_valid, known;
    exp_valid = 0;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      we = 1; waddr = (i == 0) ? '0 : (i == 1) ? AW'(N - 1) : rnd_addr(); wdata = rnd_word();
      model[int'(waddr)] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 4000; i++) begin
      logic [AW-1:0] ra;
      bit do_r, do_w;
      do_r = $urandom_range(2, 0) != 0;
      do_w = $urandom_range(3, 0) == 0;
      ra = rnd_addr();
      re = do_r; raddr = ra;
      we = do_w; waddr = (do_w && $urandom_range(1, 0)) ? ra : rnd_addr(); wdata = rnd_word();
      held = rdata;
      known = model.exists(int'(ra));
      if (do_r && known) exp_d = model[int'(ra)];
      if (do_w) model[int'(waddr)] = wdata;
      @(negedge clk);
      if (do_r && known) begin
        check(rdata === exp_d, $sformatf("read of %0d", ra));
        exp_valid = 1;
      end else if (!do_r && exp_valid) check(rdata === held, "output held without read");
      if (do_r && !known) exp_valid = 0;
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
