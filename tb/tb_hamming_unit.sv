// tb_hamming_unit: Hamming code module on a 2048-bit key, in both roles.
// For block lengths 8 to 512 a random Alice key and a Bob key with errors
// are made and the differing-parity record is computed independently.
// As Alice the unit must send, for each marked block in order, the XOR of
// the block-local positions of its 1 bits; as Bob, fed with Alice's
// syndromes, it must leave the key with bit block*n + (sA ^ sB) inverted in
// each marked block. The syndromes are also checked against the matrix
// definition h_ij = bit (i-1) of j.
`timescale 1ns/1ps
module tb_hamming_unit;
  import qkd_er_pkg::*;

  localparam int unsigned N   = 2048;
  localparam int unsigned NW  = N / 64;
  localparam int unsigned AW  = $clog2(NW);
  localparam int unsigned PWM = N / 512;
  localparam int unsigned PAW = $clog2(PWM);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, is_alice, done;
  logic [4:0]  lg_n;
  logic        mm_en;
  logic [PAW-1:0] mm_addr;
  word_t       mm_rdata;
  logic        h_en, h_we;
  logic [AW-1:0] h_addr;
  word_t       h_wdata, rdata;
  logic        req, tx_valid, tx_ready, rx_valid, rx_ready;
  word_t       tx_data, rx_data;
  logic [$clog2(N/8):0] corrected;

  logic          tb_en, tb_we;
  logic [AW-1:0] tb_addr;
  word_t         tb_wdata;
  word_t         mm_mem [PWM];

  hamming_unit #(.KEY_BITS(N)) dut (
    .clk, .rst_n, .start, .is_alice, .lg_n,
    .mm_en, .mm_addr, .mm_rdata,
    .ram_en(h_en), .ram_we(h_we), .ram_addr(h_addr), .ram_wdata(h_wdata), .ram_rdata(rdata),
    .req, .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_data, .rx_ready,
    .done, .corrected_cnt(corrected)
  );

  tdp_ram #(.WIDTH(64), .DEPTH(NW)) u_ram (
    .clk,
    .a_en(h_en | tb_en), .a_we(tb_en ? tb_we : h_we), .a_addr(tb_en ? tb_addr : h_addr),
    .a_wdata(tb_en ? tb_wdata : h_wdata), .a_rdata(rdata),
    .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata()
  );

  always_ff @(posedge clk) if (mm_en) mm_rdata <= mm_mem[mm_addr];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit ka[], kb[], got[];
  int exp_syn[$], sent_syn[$], alice_syn[$];

  // syndrome from the matrix definition: bit i-1 = parity(block & row i)
  function automatic int syndrome(ref bit k[], input int base, input int lg);
    int s = 0;
    for (int i = 1; i <= lg; i++) begin
      bit p = 0;
      for (int j = 0; j < (1 << lg); j++) p ^= k[base + j] & 1'((j >> (i - 1)) & 1);
      s |= int'(p) << (i - 1);
    end
    return s;
  endfunction

  task automatic load(ref bit k[]);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); tb_en = 1; tb_we = 1; tb_addr = AW'(w);
      for (int i = 0; i < 64; i++) tb_wdata[i] = k[w*64+i];
    end
    @(negedge clk); tb_en = 0; tb_we = 0;
  endtask

  task automatic read_all();
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); tb_en = 1; tb_we = 0; tb_addr = AW'(w);
      @(negedge clk); tb_en = 0;
      for (int i = 0; i < 64; i++) got[w*64+i] = rdata[i];
    end
  endtask

  // Alice-side outputs are captured; Bob-side inputs come from alice_syn
  int rx_idx;
  always @(posedge clk) begin
    if (tx_valid && tx_ready) sent_syn.push_back(int'(tx_data));
    if (rx_valid && rx_ready) rx_idx <= rx_idx + 1;
  end
  assign tx_ready = req && ($urandom_range(0, 2) != 0);
  assign rx_valid = req && (rx_idx < alice_syn.size());
  assign rx_data  = (rx_idx < alice_syn.size()) ? word_t'(alice_syn[rx_idx]) : '0;

  task automatic run(input bit alice, input int lg);
    int n = 1 << lg, m = N >> lg, cyc = 0, nmark = 0;
    bit diff[];
    diff = new[m];
    foreach (ka[i]) ka[i] = 1'($urandom);
    kb = ka;
    for (int e = 0; e < N / 40; e++) begin
      int q = $urandom_range(0, N - 1);
      kb[q] = ~kb[q];
    end
    foreach (mm_mem[i]) mm_mem[i] = '0;
    exp_syn.delete(); alice_syn.delete(); sent_syn.delete(); rx_idx = 0;
    for (int j = 0; j < m; j++) begin
      bit pa = 0, pb = 0;
      for (int q = 0; q < n; q++) begin pa ^= ka[j*n+q]; pb ^= kb[j*n+q]; end
      diff[j] = pa ^ pb;
      mm_mem[j / 64][j % 64] = diff[j];
      if (diff[j]) begin
        int sa = 0;
        for (int q = 0; q < n; q++) if (ka[j*n+q]) sa ^= q;
        check(sa == syndrome(ka, j*n, lg), "XOR-of-positions equals matrix syndrome");
        exp_syn.push_back(sa);
        alice_syn.push_back(sa);
        nmark++;
      end
    end
    if (alice) load(ka);
    else load(kb);
    is_alice = alice; lg_n = 5'(lg);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 100_000) begin @(negedge clk); cyc++; end
    check(done, "done");
    check(int'(corrected) == nmark, $sformatf("lg=%0d blocks handled %0d exp %0d", lg, corrected, nmark));
    read_all();
    if (alice) begin
      check(sent_syn.size() == exp_syn.size(), $sformatf("lg=%0d syndrome count", lg));
      foreach (exp_syn[i])
        if (i < sent_syn.size()) check(sent_syn[i] == exp_syn[i], $sformatf("lg=%0d syndrome %0d", lg, i));
      check(got == ka, "Alice key unchanged");
    end else begin
      for (int j = 0; j < m; j++) if (diff[j]) begin
        int sb = 0;
        for (int q = 0; q < n; q++) if (kb[j*n+q]) sb ^= q;
        for (int q = 0; q < n; q++) if (ka[j*n+q]) sb ^= q;
        kb[j*n + sb] ^= 1'b1;
      end
      begin int nd = 0; foreach (kb[q]) if (got[q] != kb[q]) begin nd++; if (nd < 4) $display("diff at %0d got %0d exp %0d", q, got[q], kb[q]); end if (nd) $display("ndiff=%0d", nd); end
      check(got == kb, $sformatf("lg=%0d Bob key corrected as expected", lg));
      check(rx_idx == alice_syn.size(), "Bob consumed all syndromes");
    end
  endtask

  initial begin
    ka = new[N]; kb = new[N]; got = new[N];
    start = 0; is_alice = 0; lg_n = 3;
    tb_en = 0; tb_we = 0; tb_addr = '0; tb_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (ka[i]) ka[i] = 0;
    for (int lg = 3; lg <= 9; lg++) begin
      run(1, lg);
      run(0, lg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
