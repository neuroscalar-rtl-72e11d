// tb_tile_input_buffer: self-checking test of the 16KB tile input buffer
// (64 rows of 256 INT8 activations, one write port, an element read port A
// and a row read port B).
//
// After all 64 rows are written with random data, 4000 cycles mix writes,
// element reads and row reads. Checks: port A returns byte a_idx of row a_row
// and port B the whole row, both one cycle after their enables and held
// without an enable; a read in the same cycle as a write of the same row
// returns the old row; port A can sweep a whole row at one element per cycle.
module tb_tile_input_buffer;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int DW = 2048;

  logic we = 0, a_re = 0, b_re = 0;
  logic [5:0] waddr = '0, a_row = '0, b_row = '0;
  logic [7:0] a_idx = '0;
  logic [DW-1:0] wdata = '0, b_data;
  logic signed [7:0] a_data;
  logic [DW-1:0] model [64];

  tile_input_buffer dut (.clk, .we, .waddr, .wdata, .a_re, .a_row, .a_idx, .a_data,
                         .b_re, .b_row, .b_data);

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
    logic [DW-1:0] bexp, bheld;
    logic [7:0] aexp, aheld;
    @(negedge clk);
    for (int r = 0; r < 64; r++) begin
      we = 1; waddr = 6'(r); wdata = rnd_word(); model[r] = wdata;
      @(negedge clk);
    end
    we = 0;
    // port A sweeps row 7 at one element per cycle
    for (int j = 0; j < 256; j++) begin
      a_re = 1; a_row = 6'd7; a_idx = 8'(j);
      @(negedge clk);
      check(a_data == model[7][j*8 +: 8], $sformatf("sweep element %0d", j));
    end
    a_re = 0;
    for (int i = 0; i < 4000; i++) begin
      bit da, db, dw;
      da = $urandom_range(1, 0); db = $urandom_range(1, 0); dw = $urandom_range(2, 0) == 0;
      a_re = da; a_row = 6'($urandom_range(63, 0)); a_idx = 8'($urandom);
      b_re = db; b_row = 6'($urandom_range(63, 0));
      we = dw; waddr = $urandom_range(1, 0) ? b_row : a_row; wdata = rnd_word();
      aexp = model[a_row][a_idx*8 +: 8]; bexp = model[b_row];
      aheld = a_data; bheld = b_data;
      if (dw) model[waddr] = wdata;
      @(negedge clk);
      check(a_data == (da ? aexp : aheld), "port A");
      check(b_data == (db ? bexp : bheld), "port B");
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
