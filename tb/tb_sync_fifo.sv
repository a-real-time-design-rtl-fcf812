// tb_sync_fifo: random pushes and pops on a 16-deep FIFO compared against
// a queue; checks data order, full/empty/count, and that a push when full
// and a pop when empty are refused.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int unsigned D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, full, empty;
  logic [31:0] din, dout;
  logic [$clog2(D):0] count;
  logic [31:0] q[$];

  sync_fifo #(.WIDTH(32), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int saw_full = 0;
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && count == 0, "empty after reset");
    for (int i = 0; i < 4000; i++) begin
      // phases: mostly push, mostly pop, mixed
      int mode = (i / 500) % 3;
      push = (mode == 0) ? ($urandom_range(0, 3) != 0) : (mode == 1) ? ($urandom_range(0, 3) == 0) : 1'($urandom);
      pop  = (mode == 1) ? ($urandom_range(0, 3) != 0) : (mode == 0) ? ($urandom_range(0, 3) == 0) : 1'($urandom);
      push = push && !full;
      pop  = pop && !empty;
      din  = $urandom;
      check(int'(count) == q.size(), "count");
      check(full == (q.size() == D), "full flag");
      check(empty == (q.size() == 0), "empty flag");
      if (!empty) check(dout == q[0], "data order");
      if (full) saw_full++;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      @(negedge clk);
    end
    check(saw_full > 0, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
