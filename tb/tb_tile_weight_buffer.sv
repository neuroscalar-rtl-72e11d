// tb_tile_weight_buffer: self-checking test of the 128KB tile weight buffer
// (two halves of 256 rows of 256 INT8 weights).
//
// A model array indexed by {half, row} records every write. Random writes to
// both halves are followed by 4000 cycles of mixed reads and writes, with the
// write usually going to the other half, as when the next operation's weights
// are staged while the current ones are read. Checks: read data one cycle
// after the enable, output held without a read, the halves are independent
// (same row number, different data), and the last row of each half works.
module tb_tile_weight_buffer;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int DW = 2048, RW = 8;

  logic we = 0, re = 0, whalf = 0, rhalf = 0;
  logic [RW-1:0] wrow = '0, rrow = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] model [int];

  tile_weight_buffer dut (.clk, .we, .whalf, .wrow, .wdata, .re, .rhalf, .rrow, .rdata);

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

  initial begin
    logic [DW-1:0] held, exp_d;
    bit known;
    @(negedge clk);
    // fill both halves completely
    for (int i = 0; i < 512; i++) begin
      we = 1; whalf = i[8]; wrow = i[7:0]; wdata = rnd_word();
      model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    check(model[5] != model[256 + 5], "halves hold different data");
    for (int i = 0; i < 4000; i++) begin
      bit do_r, do_w;
      int ra, wa;
      do_r = $urandom_range(3, 0) != 0;
      do_w = $urandom_range(1, 0) == 0;
      ra = (i % 97 == 0) ? 255 + 256 * (i % 2) : $urandom_range(511, 0);
      wa = ($urandom_range(3, 0) == 0) ? ra : (ra ^ 256) & ~32'hf | $urandom_range(15, 0);
      re = do_r; rhalf = ra[8]; rrow = ra[7:0];
      we = do_w; whalf = wa[8]; wrow = wa[7:0]; wdata = rnd_word();
      held = rdata;
      exp_d = model[ra];
      if (do_w) model[wa] = wdata;
      @(negedge clk);
      if (do_r) check(rdata == exp_d, $sformatf("read of half %0d row %0d", ra / 256, ra % 256));
      else      check(rdata == held, "output held without read");
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
