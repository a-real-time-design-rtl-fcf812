// tb_parity_cmp: two parity comparison modules, Alice and Bob, on 4096-bit
// keys held in two RAMs, connected through a randomly stalling channel
// (a small FIFO in each direction, as the interface module provides). For every block length
// from 8 to 2048 bits, random keys with errors are loaded and both
// mismatch records must equal the XOR of independently computed block
// parities, with the right count of differing blocks. The duration of a
// pass without stalls is checked at n = 8: about one clock per key word.
`timescale 1ns/1ps
module tb_parity_cmp;
  import qkd_er_pkg::*;

  localparam int unsigned N   = 4096;
  localparam int unsigned NW  = N / 64;
  localparam int unsigned AW  = $clog2(NW);
  localparam int unsigned PWM = N / 512;
  localparam int unsigned PAW = $clog2(PWM);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start;
  logic [4:0]  lg_n;
  bit          stall_on;
  logic        ram_en [2];
  logic [AW-1:0] ram_addr [2];
  word_t       ram_rdata [2];
  word_t       mem [2][NW];
  logic        req [2], tx_valid [2], tx_ready [2], rx_valid [2], rx_ready [2];
  word_t       tx_data [2], rx_data [2];
  logic        mm_we [2];
  logic [PAW-1:0] mm_addr [2];
  word_t       mm_wdata [2];
  word_t       mm [2][PWM];
  logic        done [2];
  logic [$clog2(N/8):0] mcnt [2];
  logic        gate;

  always_ff @(posedge clk) gate <= !stall_on || ($urandom_range(0, 2) != 0);

  for (genvar s = 0; s < 2; s++) begin : g_side
    parity_cmp #(.KEY_BITS(N)) dut (
      .clk, .rst_n, .start, .is_alice(s == 0), .lg_n,
      .ram_en(ram_en[s]), .ram_addr(ram_addr[s]), .ram_rdata(ram_rdata[s]),
      .req(req[s]), .tx_valid(tx_valid[s]), .tx_data(tx_data[s]), .tx_ready(tx_ready[s]),
      .rx_valid(rx_valid[s]), .rx_data(rx_data[s]), .rx_ready(rx_ready[s]),
      .mm_we(mm_we[s]), .mm_addr(mm_addr[s]), .mm_wdata(mm_wdata[s]),
      .done(done[s]), .mismatch_cnt(mcnt[s])
    );
    always_ff @(posedge clk) begin
      if (ram_en[s]) ram_rdata[s] <= mem[s][ram_addr[s]];
      if (mm_we[s])  mm[s][mm_addr[s]] <= mm_wdata[s];
    end
    // channel from side s to side 1-s: a FIFO whose output stalls at random
    logic f_full, f_empty;
    sync_fifo #(.WIDTH(64), .DEPTH(16)) u_ch (
      .clk, .rst_n, .push(tx_valid[s] & ~f_full), .din(tx_data[s]),
      .pop(rx_ready[1-s] & rx_valid[1-s]), .dout(rx_data[1-s]),
      .full(f_full), .empty(f_empty), .count()
    );
    assign tx_ready[s]   = ~f_full;
    assign rx_valid[1-s] = ~f_empty & gate;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int lg, input bit stalls, output int cycles);
    bit ka[], kb[];
    int n = 1 << lg, m = N >> lg, cnt = 0, cyc = 0;
    bit d_done[2];
    word_t exp_mm [PWM];
    ka = new[N]; kb = new[N];
    foreach (ka[i]) ka[i] = 1'($urandom);
    kb = ka;
    for (int e = 0; e < 60; e++) begin
      int q = $urandom_range(0, N - 1);
      kb[q] = ~kb[q];
    end
    for (int w = 0; w < NW; w++)
      for (int i = 0; i < 64; i++) begin
        mem[0][w][i] = ka[w*64+i];
        mem[1][w][i] = kb[w*64+i];
      end
    foreach (exp_mm[i]) exp_mm[i] = '0;
    for (int s = 0; s < 2; s++) foreach (mm[s][i]) mm[s][i] = '1;
    for (int j = 0; j < m; j++) begin
      bit p = 0;
      for (int q = 0; q < n; q++) p ^= ka[j*n+q] ^ kb[j*n+q];
      exp_mm[j/64][j%64] = p;
      cnt += p;
    end
    stall_on = stalls;
    lg_n = 5'(lg);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    d_done = '{0, 0};
    while (!(d_done[0] && d_done[1]) && cyc < 100_000) begin
      @(negedge clk);
      cyc++;
      for (int s = 0; s < 2; s++) if (done[s]) d_done[s] = 1;
    end
    cycles = cyc;
    check(d_done[0] && d_done[1], $sformatf("lg=%0d both done", lg));
    for (int s = 0; s < 2; s++) begin
      for (int k = 0; k < ((m + 63) / 64); k++)
        check(mm[s][k] == exp_mm[k], $sformatf("lg=%0d side %0d record word %0d", lg, s, k));
      check(int'(mcnt[s]) == cnt, $sformatf("lg=%0d side %0d count %0d exp %0d", lg, s, mcnt[s], cnt));
    end
  endtask

  initial begin
    int cyc;
    start = 0; lg_n = 3; stall_on = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 0, cyc);
    // 64 key words, 8 parity words each way: pipelined, well under 2 clocks per word
    check(cyc <= NW + 3 * (NW / 8) + 8, $sformatf("pipelined pass length %0d", cyc));
    for (int lg = 3; lg <= 11; lg++) run(lg, 1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
