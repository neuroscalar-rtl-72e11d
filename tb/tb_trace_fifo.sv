// tb_trace_fifo: self-checking test of the trace FIFO at its full size (512
// entries of 1000 bits, i.e. five 200-bit trace records per entry).
//
// A queue models the expected contents. Phase 1 fills the FIFO with pushes
// only and checks that full rises after exactly 512 pushes and that a push
// into a full FIFO is dropped. Phase 2 empties it and checks order and the
// empty flag. Phase 3 runs 20,000 cycles of random pushes and pops and checks
// the first-word-fall-through data, count, full and empty every cycle,
// including a push and a pop in the same cycle while full.
module tb_trace_fifo;
  localparam int DEPTH = 512, WIDTH = 1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0, full, empty;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] count;

  trace_fifo dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en, .rd_data, .full, .empty, .count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [WIDTH-1:0] q [$];

  function automatic logic [WIDTH-1:0] rnd_word();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  // drive at negedge, check state before the next posedge
  task automatic step(input bit w, input bit r);
    logic [WIDTH-1:0] d;
    int sz;
    d = rnd_word();
    wr_en = w; rd_en = r; wr_data = d;
    #1;
    check(count == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
    check(full == (q.size() == DEPTH), "full flag");
    check(empty == (q.size() == 0), "empty flag");
    if (q.size() > 0) check(rd_data == q[0], "head data");
    @(posedge clk);
    sz = q.size();
    if (r && sz > 0) void'(q.pop_front());
    if (w && sz < DEPTH) q.push_back(d);
    @(negedge clk);
  endtask

  initial begin
    int pushes;
    repeat (5) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: fill
    pushes = 0;
    while (!full && pushes < DEPTH + 5) begin step(1, 0); pushes++; end
    check(pushes == DEPTH, $sformatf("full after %0d pushes", pushes));
    step(1, 0);                                   // dropped
    check(count == DEPTH, "push into full FIFO dropped");
    // push and pop together while full: pop happens, push is dropped
    step(1, 1);
    // phase 2: drain
    while (q.size() > 0) step(0, 1);
    check(empty, "empty after drain");
    // phase 3: random traffic
    for (int i = 0; i < 20000; i++) begin
      int bias;
      bias = (i / 2000) % 2 ? 70 : 30;              // alternate filling and draining
      step($urandom_range(99, 0) < bias + 20, $urandom_range(99, 0) < 100 - bias);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
