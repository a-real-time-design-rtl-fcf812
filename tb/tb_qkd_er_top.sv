// tb_qkd_er_top: end-to-end test of two complete engines, one configured as
// Alice and one as Bob, with their modules' channels joined by a link that
// stalls at random. Reduced size: 2 modules of 4096 bits. Several
// reconciliations are run (different error rates and seeds); in each, every
// module gets its own random key and error pattern, and all results are
// compared with the bit-level reference model: final keys on both sides,
// passes, disclosed bits, corrections, CRC verdict. The test also counts how
// often each mechanism of the design occurred and fails if one never did:
// Hamming corrections, permutations, stop on equal parities, stop at
// n = N/2, key kept, key discarded, waits for the other side, and
// backpressure of a full channel FIFO.
`timescale 1ns/1ps
module tb_qkd_er_top;
  import qkd_er_pkg::*;
  import recon_model_pkg::*;

  localparam int unsigned NM = 2;
  localparam int unsigned N  = 4096;
  localparam int unsigned NW = N / 64;
  localparam int unsigned LW = $clog2(N);
  localparam int unsigned FD = 16;

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
    qkd_er_top #(.NUM_MODULES(NM), .KEY_BITS(N), .FIFO_DEPTH(FD)) dut (
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
    while (!(all_done[0] && all_done[1]) && cyc < 3_000_000) begin
      @(negedge clk);
      cyc++;
    end
    check(all_done[0] && all_done[1], "all modules finish");
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
    run(1311, 12, 5, 78);    // p = 0.02 estimated, 0.3 % actual: equal parities early
    run(1966, 123, 5, 78);   // p = 0.03
    run(6553, 410, 9, 1000); // p = 0.10: long run, may reach n = N/2
    check(n_fix > 0, "Hamming corrections happened");
    check(n_perm > 0, "permutations happened");
    check(n_stop_equal > 0, "stop on equal parities happened");
    check(n_stop_half > 0, "stop at n = N/2 happened");
    check(n_kept > 0, "key kept after CRC");
    check(n_discarded > 0, "key discarded after CRC");
    check(n_wait > 0, "waits for the other side happened");
    check(n_full > 0, "channel backpressure happened");
    $display("mechanisms: fix=%0d perm=%0d stop_equal=%0d stop_half=%0d kept=%0d discarded=%0d wait=%0d full=%0d",
             n_fix, n_perm, n_stop_equal, n_stop_half, n_kept, n_discarded, n_wait, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
