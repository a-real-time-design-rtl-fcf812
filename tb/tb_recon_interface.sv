// tb_recon_interface: the interface module with two bus users. Words from
// the other side arrive at random times into the incoming FIFO while user
// 0 and then user 1 (taking turns on the bus) read some and write others;
// the channel output drains at random. Checks that every incoming word is
// delivered once, in order, to whichever user owns the bus, that the
// outgoing stream carries the users' words in order, and that a wait on an
// empty incoming FIFO was reported.
`timescale 1ns/1ps
module tb_recon_interface;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ch_rx_valid, ch_rx_ready, ch_tx_valid, ch_tx_ready, rx_wait;
  logic [63:0] ch_rx_data, ch_tx_data, rx_data;
  logic [1:0] req, grant, tx_valid, tx_ready, rx_valid, rx_ready;
  logic [63:0] tx_data [2];

  recon_interface #(.NREQ(2), .WIDTH(64), .FIFO_DEPTH(8)) dut (.clk, .rst_n,
    .ch_rx_valid, .ch_rx_data, .ch_rx_ready, .ch_tx_valid, .ch_tx_data, .ch_tx_ready,
    .req, .grant, .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_ready, .rx_data, .rx_wait);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int in_sent = 0, in_got = 0, out_sent = 0, out_got = 0, waits = 0;
  localparam int TOTAL = 200;
  // each user: reads 100 words and writes 100 words, then releases the bus
  int user_rd [2], user_wr [2];

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (ch_rx_valid && ch_rx_ready) in_sent <= in_sent + 1;
      if (ch_tx_valid && ch_tx_ready) begin
        checks++;
        if (ch_tx_data != 64'(out_got)) begin failures++; $display("FAIL: out word %0d", out_got); end
        out_got <= out_got + 1;
      end
      if (rx_wait) waits <= waits + 1;
      for (int u = 0; u < 2; u++) begin
        if (rx_valid[u] && rx_ready[u]) begin
          checks++;
          if (rx_data != 64'hA000 + 64'(in_got)) begin failures++; $display("FAIL: in word %0d", in_got); end
          in_got <= in_got + 1;
          user_rd[u] <= user_rd[u] + 1;
        end
        if (tx_valid[u] && tx_ready[u]) begin
          out_sent <= out_sent + 1;
          user_wr[u] <= user_wr[u] + 1;
        end
      end
    end
  end

  always_comb begin
    for (int u = 0; u < 2; u++) begin
      req[u]      = (u == 0) ? (user_rd[0] < 100 || user_wr[0] < 100)
                             : (user_rd[1] < 100 || user_wr[1] < 100);
      rx_ready[u] = grant[u] && user_rd[u] < 100;
      tx_valid[u] = grant[u] && user_wr[u] < 100;
      tx_data[u]  = 64'(out_sent);
    end
  end

  always_ff @(posedge clk) begin
    ch_rx_valid <= rst_n && (in_sent + (ch_rx_valid && ch_rx_ready) < TOTAL) && ($urandom_range(0, 3) == 0);
    ch_tx_ready <= 1'($urandom);
  end
  assign ch_rx_data = 64'hA000 + 64'(in_sent);

  initial begin
    user_rd = '{0, 0}; user_wr = '{0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (out_got == TOTAL && in_got == TOTAL);
    repeat (5) @(negedge clk);
    check(waits > 0, "wait on empty incoming FIFO reported");
    check(user_rd[0] == 100 && user_rd[1] == 100, "both users served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired in=%0d out=%0d", in_got, out_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
