// tb_lfsr: the 16-bit LFSR (the width for a 64 Kbit key) started from seed
// 5 must visit all 65535 nonzero states exactly once before returning to
// the seed; the first states are compared with an independent step
// function; a 12-bit instance is checked for period 4095; a zero seed loads
// as 1; step low holds the state.
`timescale 1ns/1ps
module tb_lfsr;
  import recon_model_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load, step, load12, step12;
  logic [15:0] seed, state;
  logic [11:0] seed12, state12;

  lfsr #(.WIDTH(16)) dut (.clk, .rst_n, .load, .seed, .step, .state);
  lfsr #(.WIDTH(12)) dut12 (.clk, .rst_n, .load(load12), .seed(seed12), .step(step12), .state(state12));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit seen [65536];
  initial begin
    int ref_s, period;
    load = 0; step = 0; seed = 5; load12 = 0; step12 = 0; seed12 = 5;
    repeat (2) @(negedge clk);
    rst_n = 1;
    load = 1; load12 = 1;
    @(negedge clk);
    load = 0; load12 = 0;
    check(state == 16'd5, "seed loaded");
    step = 1;
    ref_s = 5;
    period = 0;
    foreach (seen[i]) seen[i] = 0;
    do begin
      check(!seen[state], "state not repeated within the period");
      seen[state] = 1;
      if (period < 1000) check(int'(state) == ref_s, "state sequence");
      ref_s = lfsr_next(ref_s, 16);
      @(negedge clk);
      period++;
    end while (state != 16'd5 && period < 70000);
    check(period == 65535, $sformatf("period %0d", period));
    check(!seen[0], "zero never reached");
    step = 0;
    @(negedge clk);
    @(negedge clk);
    check(state == 16'd5, "hold without step");
    step12 = 1;
    period = 0;
    do begin @(negedge clk); period++; end while (state12 != 12'd5 && period < 5000);
    check(period == 4095, $sformatf("12-bit period %0d", period));
    step12 = 0;
    seed = 0; load = 1;
    @(negedge clk);
    load = 0;
    check(state == 16'd1, "zero seed replaced by 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
