// tb_recon_module: Alice and Bob reconciliation modules connected back to
// back through a channel that stalls at random, at a reduced key length of
// 4096 bits. For several error rates a random key is loaded into Alice,
// Bob gets a copy with random errors, both are started, and the result is
// compared with the bit-level reference model: final keys of both sides,
// number of passes, disclosed bits, corrections and the CRC verdict.
// Also checks the one-pass case of identical keys and that waits on the
// channel occurred.
`timescale 1ns/1ps
module tb_recon_module;
  import qkd_er_pkg::*;
  import recon_model_pkg::*;

  localparam int unsigned N  = 4096;
  localparam int unsigned NW = N / 64;
  localparam int unsigned LW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // per side: 0 = Alice, 1 = Bob
  logic        start;
  logic [15:0] p_q16;
  logic [LW-1:0] seed_a, seed_b;
  logic        key_en [2], key_we [2];
  logic [$clog2(NW)-1:0] key_addr [2];
  word_t       key_wdata [2], key_rdata [2];
  logic        rx_valid [2], rx_ready [2], tx_valid [2], tx_ready [2];
  word_t       rx_data [2], tx_data [2];
  logic        busy [2], done [2], key_ok [2];
  logic [4:0]  passes [2];
  logic [31:0] leak [2], fixed [2], waits [2];

  // channel: word from side s to side 1-s moves when the gate is open
  logic gate [2];
  always_ff @(posedge clk) begin
    gate[0] <= ($urandom_range(0, 3) != 0);
    gate[1] <= ($urandom_range(0, 3) != 0);
  end
  for (genvar s = 0; s < 2; s++) begin : g_ch
    assign rx_valid[1-s] = tx_valid[s] & gate[s];
    assign rx_data[1-s]  = tx_data[s];
    assign tx_ready[s]   = rx_ready[1-s] & gate[s];
  end

  for (genvar s = 0; s < 2; s++) begin : g_side
    recon_module #(.KEY_BITS(N), .FIFO_DEPTH(16)) dut (
      .clk, .rst_n, .is_alice(s == 0), .start, .p_q16, .seed_a, .seed_b,
      .key_en(key_en[s]), .key_we(key_we[s]), .key_addr(key_addr[s]),
      .key_wdata(key_wdata[s]), .key_rdata(key_rdata[s]),
      .ch_rx_valid(rx_valid[s]), .ch_rx_data(rx_data[s]), .ch_rx_ready(rx_ready[s]),
      .ch_tx_valid(tx_valid[s]), .ch_tx_data(tx_data[s]), .ch_tx_ready(tx_ready[s]),
      .busy(busy[s]), .done(done[s]), .key_ok(key_ok[s]), .passes(passes[s]),
      .leak_bits(leak[s]), .fixed_cnt(fixed[s]), .wait_cycles(waits[s])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_key(input int s, ref bit k[]);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      key_en[s] = 1; key_we[s] = 1; key_addr[s] = w[$clog2(NW)-1:0];
      for (int i = 0; i < 64; i++) key_wdata[s][i] = k[w*64 + i];
    end
    @(negedge clk);
    key_en[s] = 0; key_we[s] = 0;
  endtask

  task automatic read_key(input int s, ref bit k[]);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      key_en[s] = 1; key_we[s] = 0; key_addr[s] = w[$clog2(NW)-1:0];
      @(negedge clk);
      key_en[s] = 0;
      for (int i = 0; i < 64; i++) k[w*64 + i] = key_rdata[s][i];
    end
  endtask

  int total_waits = 0;

  task automatic run_case(input int pq, input int nerr, input int sa, input int sb);
    bit a[], b[], ma[], mb[], ra[], rb[];
    result_t r;
    int cyc;
    a = new[N]; b = new[N]; ra = new[N]; rb = new[N];
    foreach (a[i]) a[i] = 1'($urandom);
    b = a;
    for (int e = 0; e < nerr; e++) begin
      int q = $urandom_range(0, N - 1);
      b[q] = ~b[q];
    end
    ma = a; mb = b;
    r = reconcile(ma, mb, pq, sa, sb);
    write_key(0, a);
    write_key(1, b);
    @(negedge clk);
    p_q16 = 16'(pq); seed_a = LW'(sa); seed_b = LW'(sb);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!(done[0] && done[1]) && cyc < 2_000_000) begin
      @(negedge clk);
      cyc++;
    end
    check(done[0] && done[1], $sformatf("p=%0d both sides finish", pq));
    read_key(0, ra);
    read_key(1, rb);
    check(ra == ma, $sformatf("p=%0d Alice key matches model", pq));
    check(rb == mb, $sformatf("p=%0d Bob key matches model", pq));
    for (int s = 0; s < 2; s++) begin
      check(passes[s] == 5'(r.passes), $sformatf("p=%0d side %0d passes %0d exp %0d", pq, s, passes[s], r.passes));
      check(leak[s] == 32'(r.leak), $sformatf("p=%0d side %0d leak %0d exp %0d", pq, s, leak[s], r.leak));
      check(fixed[s] == 32'(r.fixed), $sformatf("p=%0d side %0d fixed %0d exp %0d", pq, s, fixed[s], r.fixed));
      check(key_ok[s] == r.key_ok, $sformatf("p=%0d side %0d key_ok %0d exp %0d", pq, s, key_ok[s], r.key_ok));
      total_waits += int'(waits[s]);
    end
    $display("case p_q16=%0d errors=%0d: passes=%0d fixed=%0d leak=%0d key_ok=%0d cycles=%0d",
             pq, nerr, r.passes, r.fixed, r.leak, r.key_ok, cyc);
  endtask

  initial begin
    start = 0; p_q16 = 0; seed_a = 5; seed_b = 78;
    for (int s = 0; s < 2; s++) begin
      key_en[s] = 0; key_we[s] = 0; key_addr[s] = '0; key_wdata[s] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(0,    0,   5, 78);   // identical keys: one pass
    run_case(655,  41,  5, 78);   // p = 0.01, n0 = 64
    run_case(3276, 205, 5, 78);   // p = 0.05, n0 = 16
    run_case(6553, 410, 5, 1234); // p = 0.10, n0 = 8
    run_case(1966, 123, 7, 300);  // p = 0.03, n0 = 16
    check(total_waits > 0, "channel waits occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
