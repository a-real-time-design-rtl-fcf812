// tb_bus_ctrl: three requesters raise and drop requests at random. The
// grant is compared each clock with an independent model (held while the
// owner keeps req, else lowest requesting index, one clock late); the FIFO
// push, data and pop must come from the granted requester only; rx_wait
// must flag a granted reader facing an empty FIFO.
`timescale 1ns/1ps
module tb_bus_ctrl;
  localparam int NREQ = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NREQ-1:0] req, grant, tx_valid, tx_ready, rx_valid, rx_ready;
  logic [15:0] tx_data [NREQ];
  logic [15:0] rx_data, out_din, in_dout;
  logic out_push, out_full, in_pop, in_empty, rx_wait;

  bus_ctrl #(.NREQ(NREQ), .WIDTH(16)) dut (.clk, .rst_n, .req, .grant, .tx_valid, .tx_data, .tx_ready,
    .rx_valid, .rx_ready, .rx_data, .out_push, .out_din, .out_full, .in_pop, .in_dout, .in_empty, .rx_wait);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int exp_g;   // index of expected owner, -1 none
  int handovers = 0;
  initial begin
    req = 0; tx_valid = 0; rx_ready = 0; out_full = 0; in_empty = 1; in_dout = 0;
    foreach (tx_data[i]) tx_data[i] = 0;
    exp_g = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      // change inputs away from the clock edge
      for (int i = 0; i < NREQ; i++) begin
        if ($urandom_range(0, 9) == 0) req[i] = ~req[i];
        tx_valid[i] = 1'($urandom);
        rx_ready[i] = 1'($urandom);
        tx_data[i]  = 16'($urandom);
      end
      out_full = ($urandom_range(0, 4) == 0);
      in_empty = ($urandom_range(0, 3) == 0);
      in_dout  = 16'($urandom);
      #1;
      check(grant == ((exp_g < 0) ? 3'b000 : 3'(1 << exp_g)), $sformatf("grant %b expected owner %0d", grant, exp_g));
      if (exp_g >= 0 && req[exp_g]) begin
        check(out_push == (tx_valid[exp_g] && !out_full), "push from owner");
        if (out_push) check(out_din == tx_data[exp_g], "data from owner");
        check(in_pop == (rx_ready[exp_g] && !in_empty), "pop by owner");
        check(rx_wait == (rx_ready[exp_g] && in_empty), "wait flag");
        check(tx_ready == (out_full ? 3'b000 : 3'(1 << exp_g)), "tx_ready only to owner");
      end else begin
        check(!out_push && !in_pop && tx_ready == 0 && rx_valid == 0, "no bus traffic without owner");
      end
      check(rx_data == in_dout, "rx broadcast");
      @(posedge clk);
      // model: keep owner while it requests, else pick lowest requester
      if (!(exp_g >= 0 && req[exp_g])) begin
        int nxt;
        nxt = -1;
        for (int i = NREQ - 1; i >= 0; i--) if (req[i]) nxt = i;
        if (nxt >= 0 && exp_g >= 0 && nxt != exp_g) handovers++;
        exp_g = nxt;
      end
      @(negedge clk);
    end
    check(handovers > 10, "ownership changed hands");
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
