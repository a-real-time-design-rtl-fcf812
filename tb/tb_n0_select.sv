// tb_n0_select: initial block length for the error rates of the paper's
// examples (0.01, 0.05, 0.10, 0.15 give 64, 16, 8, 8), the boundary rates
// 0.0125, 0.025, 0.05, 0.1 (64, 32, 16, 8), p = 0 (capped at N/2), and a
// sweep compared with a direct search for the largest power of two with
// n0 * p <= 0.8.
`timescale 1ns/1ps
module tb_n0_select;
  int checks = 0, failures = 0;
  logic [15:0] p_q16;
  logic [4:0]  lg_n0;

  n0_select #(.KEY_BITS(65536)) dut (.p_q16, .lg_n0);

  task automatic expect_n0(input real p, input int n0);
    p_q16 = 16'($floor(p * 65536.0));
    #1;
    checks++;
    if ((1 << lg_n0) != n0) begin
      failures++;
      $display("FAIL: p=%f n0=%0d expected %0d", p, 1 << lg_n0, n0);
    end
  endtask

  initial begin
    expect_n0(0.01, 64);
    expect_n0(0.05, 16);
    expect_n0(0.10, 8);
    expect_n0(0.15, 8);
    expect_n0(0.0125, 64);
    expect_n0(0.025, 32);
    expect_n0(0.04, 16);
    expect_n0(0.0, 32768);
    for (int i = 1; i < 400; i++) begin
      real p;
      int best;
      p = i * 0.0005;
      best = 8;
      for (int n = 8; n <= 32768; n *= 2) if (n * $floor(p * 65536.0) <= 52428.8) best = n;
      expect_n0(p, best);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
