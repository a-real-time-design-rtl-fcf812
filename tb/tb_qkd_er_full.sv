// tb_qkd_er_full: one full-size reconciliation with every parameter of the
// engine at its default: eight modules of 64 Kbit per side (512 Kbit), as in
// the paper's timing measurement. Alice's and Bob's engines are joined by a
// randomly stalling link; each module gets its own random key, and Bob's
// copy carries errors at a 3 % rate (the estimated error rate given to the
// engines is also 3 %, giving n0 = 16). Final keys, passes, disclosed bits,
// corrections and CRC verdicts are compared with the bit-level reference
// model. The reconciliation time is checked against the paper's figure of
// under 50 ms for error rates below 4 % at a 100 MHz clock (5,000,000
// clocks), excluding channel latency.
`timescale 1ns/1ps
module tb_qkd_er_full;
  import qkd_er_pkg::*;
  import recon_model_pkg::*;

  localparam int unsigned NM = 8;
  localparam int unsigned N  = 65536;
  localparam int unsigned NW = N / 64;
  localparam int unsigned LW = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start;
  logic [15:0] p_q16;
  logic [LW-1:0] seed_a, seed_b;
  logic [$clog2(NM)-1:0] key_sel;
  logic key_en [2], key_we;
  logic [$clog2(NW)-1:0] key_addr;
  word_t key_wdata, key_rdata [2];
  logic [NM-1:0] rx_valid [2], rx_ready [2], tx_valid [2], tx_ready [2];
  word_t rx_data [2][NM], tx_data [2][NM];
  logic all_done [2];
  logic [NM-1:0] busy [2], done [2], key_ok [2];
  logic [4:0]  passes [2][NM];
  logic [31:0] leak [2][NM], fixed [2][NM], waits [2][NM];

  logic [NM-1:0] gate [2];
  always_ff @(posedge clk)
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < NM; m++) gate[s][m] <= ($urandom_range(0, 4) != 0);

  for (genvar s = 0; s < 2; s++) begin : g_side
    assign rx_valid[1-s] = tx_valid[s] & gate[s];
    assign rx_data[1-s]  = tx_data[s];
    assign tx_ready[s]   = rx_ready[1-s] & gate[s];
    qkd_er_top dut (
      .clk, .rst_n, .is_alice(s == 0), .start, .p_q16, .seed_a, .seed_b,
      .key_sel, .key_en(key_en[s]), .key_we, .key_addr, .key_wdata, .key_rdata(key_rdata[s]),
      .ch_rx_valid(rx_valid[s]), .ch_rx_data(rx_data[s]), .ch_rx_ready(rx_ready[s]),
      .ch_tx_valid(tx_valid[s]), .ch_tx_data(tx_data[s]), .ch_tx_ready(tx_ready[s]),
      .all_done(all_done[s]), .busy(busy[s]), .done(done[s]), .key_ok(key_ok[s]),
      .passes(passes[s]), .leak_bits(leak[s]), .fixed_cnt(fixed[s]), .wait_cycles(waits[s])
    );
  end

  // mechanism counters
  int n_fix = 0, n_perm = 0, n_stop_equal = 0, n_stop_half = 0, n_kept = 0, n_discarded = 0,
      n_wait = 0, n_full = 0;
  always @(posedge clk)
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < NM; m++)
        if (tx_valid[s][m] && !tx_ready[s][m] && rx_ready[1-s][m] == 1'b0) n_full++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_key(input int s, input int m, ref bit k[]);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      key_en[s] = 1; key_we = 1; key_sel = ($clog2(NM))'(m); key_addr = ($clog2(NW))'(w);
      for (int i = 0; i < 64; i++) key_wdata[i] = k[w*64 + i];
    end
    @(negedge clk);
    key_en[s] = 0; key_we = 0;
  endtask

  task automatic read_key(input int s, input int m, ref bit k[]);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      key_en[s] = 1; key_we = 0; key_sel = ($clog2(NM))'(m); key_addr = ($clog2(NW))'(w);
      @(negedge clk);
      key_en[s] = 0;
      for (int i = 0; i < 64; i++) k[w*64 + i] = key_rdata[s][i];
    end
  endtask

  int last_cycles;

  task automatic run(input int pq, input int nerr, input int sa, input int sb);
    bit a[NM][], b[NM][], ra[], rb[];
    result_t r[NM];
    int cyc = 0;
    ra = new[N]; rb = new[N];
    for (int m = 0; m < NM; m++) begin
      bit ma[], mb[];
      a[m] = new[N];
      foreach (a[m][i]) a[m][i] = 1'($urandom);
      b[m] = a[m];
      for (int e = 0; e < nerr; e++) begin
        int q;
        q = $urandom_range(0, N - 1);
        b[m][q] = ~b[m][q];
      end
      ma = a[m]; mb = b[m];
      write_key(0, m, ma);
      write_key(1, m, mb);
      r[m] = reconcile(ma, mb, pq, sa, sb);
      a[m] = ma; b[m] = mb;
    end
    @(negedge clk);
    p_q16 = 16'(pq); seed_a = LW'(sa); seed_b = LW'(sb);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!(all_done[0] && all_done[1]) && cyc < 20_000_000) begin
      @(negedge clk);
      cyc++;
    end
    check(all_done[0] && all_done[1], "all modules finish");
    last_cycles = cyc;
    for (int m = 0; m < NM; m++) begin
      read_key(0, m, ra);
      read_key(1, m, rb);
      check(ra == a[m], $sformatf("module %0d Alice key", m));
      check(rb == b[m], $sformatf("module %0d Bob key", m));
      for (int s = 0; s < 2; s++) begin
        check(passes[s][m] == 5'(r[m].passes), $sformatf("m%0d s%0d passes", m, s));
        check(leak[s][m] == 32'(r[m].leak), $sformatf("m%0d s%0d leak", m, s));
        check(fixed[s][m] == 32'(r[m].fixed), $sformatf("m%0d s%0d fixed", m, s));
        check(key_ok[s][m] == r[m].key_ok, $sformatf("m%0d s%0d key_ok", m, s));
        if (waits[s][m] != 0) n_wait++;
      end
      if (r[m].fixed > 0) n_fix++;
      if (r[m].passes > 1) n_perm++;
      if (r[m].passes == LW - 1 - lg_n0(pq, LW) + 1) n_stop_half++;
      else n_stop_equal++;
      if (key_ok[1][m]) n_kept++;
      else n_discarded++;
      $display("p_q16=%0d module %0d: passes=%0d fixed=%0d leak=%0d key_ok=%0d cycles=%0d",
               pq, m, r[m].passes, r[m].fixed, r[m].leak, r[m].key_ok, cyc);
    end
  endtask

  initial begin
    start = 0; p_q16 = 0; seed_a = 5; seed_b = 78; key_sel = 0; key_we = 0;
    key_addr = 0; key_wdata = 0; key_en[0] = 0; key_en[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1966, 1966, 5, 78);  // p = 0.03: 1966 errors in each 64 Kbit module
    check(last_cycles < 5_000_000, $sformatf("512 Kbit reconciled in %0d clocks (< 50 ms at 100 MHz)", last_cycles));
    check(n_fix > 0, "Hamming corrections happened");
    check(n_perm > 0, "permutations happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
