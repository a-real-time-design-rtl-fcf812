// tb_recon_ctrl: the pass controller against a scripted environment. The
// units answer each start pulse with a done pulse after a random delay, and
// the parity comparison reports a scripted number of differing blocks per
// pass. Checks the order of units (parity, Hamming, permutation, back to
// parity with n doubled), both stop rules (no differing block; n reached
// N/2 without running the Hamming step), the counts of passes and
// disclosed bits, the CRC exchange on the bus and the key_ok verdict for
// equal and unequal CRCs.
`timescale 1ns/1ps
module tb_recon_ctrl;
  import qkd_er_pkg::*;
  localparam int unsigned N = 4096;   // N/2 = 2^11
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, load_seed, start_parity, start_hamming, start_permute, start_crc;
  logic parity_done, hamming_done, permute_done, crc_done;
  logic [4:0] lg_n0, lg_n, passes;
  phase_e phase;
  logic [$clog2(N/8):0] mismatch_cnt;
  logic [63:0] crc;
  logic req, tx_valid, tx_ready, rx_valid, rx_ready, done, key_ok;
  word_t tx_data, rx_data;
  logic [31:0] leak_bits;

  recon_ctrl #(.KEY_BITS(N)) dut (.clk, .rst_n, .start, .lg_n0, .phase, .lg_n, .load_seed,
    .start_parity, .start_hamming, .start_permute, .start_crc,
    .parity_done, .mismatch_cnt, .hamming_done, .permute_done, .crc_done, .crc,
    .req, .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_data, .rx_ready,
    .done, .key_ok, .passes, .leak_bits);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // scripted environment
  int script[$];
  int pidx;
  string trace;
  logic [63:0] other_crc;
  bit crc_sent;

  // (ignores the unit outputs until reset has been released)
  always @(posedge clk) if (rst_n) begin
    if (start_parity) fork begin
      int cnt;
      cnt = script[pidx];
      trace = {trace, $sformatf("P%0d ", lg_n)};
      repeat ($urandom_range(1, 20)) @(posedge clk);
      mismatch_cnt <= ($clog2(N/8)+1)'(cnt);
      parity_done <= 1;
      @(posedge clk) parity_done <= 0;
    end join_none
    if (start_hamming) fork begin
      trace = {trace, "H "};
      repeat ($urandom_range(1, 20)) @(posedge clk);
      hamming_done <= 1;
      @(posedge clk) hamming_done <= 0;
    end join_none
    if (start_permute) fork begin
      trace = {trace, "X "};
      repeat ($urandom_range(1, 20)) @(posedge clk);
      permute_done <= 1;
      @(posedge clk) permute_done <= 0;
    end join_none
    if (start_crc) fork begin
      trace = {trace, "C "};
      repeat ($urandom_range(1, 20)) @(posedge clk);
      crc_done <= 1;
      @(posedge clk) crc_done <= 0;
    end join_none
    if (parity_done) pidx <= pidx + 1;
    if (tx_valid && tx_ready) begin
      crc_sent <= 1;
      checks++;
      if (tx_data != crc) begin failures++; $display("FAIL: CRC word sent"); end
    end
  end

  assign tx_ready = req && ($urandom_range(0, 1) == 1);
  assign rx_valid = req && crc_sent;
  assign rx_data  = other_crc;

  task automatic run(input int lg0, input int sc[$], input bit same_crc,
                     input string exp_trace, input int exp_passes, input int exp_leak);
    int cyc = 0;
    script = sc; pidx = 0; trace = ""; crc_sent = 0;
    crc = {$urandom, $urandom};
    other_crc = same_crc ? crc : ~crc;
    lg_n0 = 5'(lg0);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    check(done, "done");
    check(trace == exp_trace, $sformatf("unit order '%s' expected '%s'", trace, exp_trace));
    check(int'(passes) == exp_passes, $sformatf("passes %0d expected %0d", passes, exp_passes));
    check(int'(leak_bits) == exp_leak, $sformatf("leak %0d expected %0d", leak_bits, exp_leak));
    check(key_ok == same_crc, "key_ok verdict");
  endtask

  int seeds_loaded = 0;
  always @(posedge clk) if (rst_n && load_seed) seeds_loaded++;

  initial begin
    start = 0; lg_n0 = 3; parity_done = 0; hamming_done = 0; permute_done = 0; crc_done = 0;
    mismatch_cnt = 0; crc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // n0 = 16: mismatches 10, 4, 0 -> three passes
    // leak: 256 + 10*4 + 128 + 4*5 + 64 + 64 (CRC) = 572
    run(4, '{10, 4, 0}, 1, "P4 H X P5 H X P6 C ", 3, 572);
    // n0 = 512: 3, 2, then n = 2048 = N/2 stops with 1 mismatch, no Hamming
    // leak: 8 + 3*9 + 4 + 2*10 + 2 + 64 = 125
    run(9, '{3, 2, 1}, 0, "P9 H X P10 H X P11 C ", 3, 125);
    // identical keys: one pass
    run(6, '{0}, 1, "P6 C ", 1, 64 + 64);
    check(seeds_loaded == 3, "seeds loaded once per reconciliation");
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
