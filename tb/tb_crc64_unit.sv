// tb_crc64_unit: CRC-64 of a 1024-word RAM (64 Kbit, the paper's key length)
// filled with random data, compared with a bit-serial reference; also the
// CRC-64/ECMA-182 check value (0x6C40DF5F0B497347 for "123456789") through
// the word function, a single-bit change, and the latency of NUM_WORDS + 2.
`timescale 1ns/1ps
module tb_crc64_unit;
  import qkd_er_pkg::*;
  import recon_model_pkg::*;
  localparam int unsigned NW = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, ram_en, done;
  logic [9:0] ram_addr;
  word_t ram_rdata;
  logic [63:0] crc;
  word_t mem [NW];

  crc64_unit #(.NUM_WORDS(NW)) dut (.clk, .rst_n, .start, .ram_en, .ram_addr, .ram_rdata, .done, .crc);
  always_ff @(posedge clk) if (ram_en) ram_rdata <= mem[ram_addr];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_and_check(input string what);
    bit k[];
    int cyc = 0;
    k = new[NW*64];
    for (int w = 0; w < NW; w++) for (int i = 0; i < 64; i++) k[w*64+i] = mem[w][i];
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    check(done, {what, " done"});
    check(cyc == NW + 1, $sformatf("%s latency %0d", what, cyc + 1));
    check(crc == crc64(k), {what, " CRC value"});
  endtask

  initial begin
    logic [63:0] c;
    start = 0;
    // "123456789" as 9 bytes, MSB first: fold one 64-bit word then one byte
    c = crc64_word(64'd0, 64'h3132333435363738);
    for (int i = 7; i >= 0; i--) begin
      logic fb;
      fb = c[63] ^ 8'h39 >> i & 1'b1;
      c = {c[62:0], 1'b0};
      if (fb) c ^= 64'h42F0_E1EB_A9EA_3693;
    end
    check(c == 64'h6C40_DF5F_0B49_7347, $sformatf("ECMA-182 check value %h", c));
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (mem[i]) mem[i] = {$urandom, $urandom};
    run_and_check("random");
    mem[517][13] = ~mem[517][13];
    run_and_check("one bit changed");
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
