// tb_permute: permutation module on a key RAM of 1024 bits. A random key is
// written, two permutations are run back to back (the LFSRs continue from
// the first into the second) and after each the RAM contents are compared
// with the reference swap sequence of recon_model_pkg. The duration of a
// pass is checked to be 2 clocks per exchange. A second load with seed 0
// checks that a zero seed is replaced by 1.
`timescale 1ns/1ps
module tb_permute;
  import qkd_er_pkg::*;
  import recon_model_pkg::*;

  localparam int unsigned N  = 1024;
  localparam int unsigned NW = N / 64;
  localparam int unsigned LW = $clog2(N);
  localparam int unsigned AW = $clog2(NW);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          load_seed, start, done;
  logic [LW-1:0] seed_a, seed_b;
  logic          pa_en, pa_we, pb_en, pb_we;
  logic [AW-1:0] pa_addr, pb_addr;
  word_t         pa_wdata, pb_wdata, a_rdata, b_rdata;

  // testbench access to port A while the permutation is idle
  logic          tb_en, tb_we;
  logic [AW-1:0] tb_addr;
  word_t         tb_wdata;

  permute #(.KEY_BITS(N)) dut (
    .clk, .rst_n, .load_seed, .seed_a, .seed_b, .start,
    .a_en(pa_en), .a_we(pa_we), .a_addr(pa_addr), .a_wdata(pa_wdata), .a_rdata,
    .b_en(pb_en), .b_we(pb_we), .b_addr(pb_addr), .b_wdata(pb_wdata), .b_rdata,
    .done
  );

  tdp_ram #(.WIDTH(64), .DEPTH(NW)) u_ram (
    .clk,
    .a_en(pa_en | tb_en), .a_we(tb_en ? tb_we : pa_we), .a_addr(tb_en ? tb_addr : pa_addr),
    .a_wdata(tb_en ? tb_wdata : pa_wdata), .a_rdata,
    .b_en(pb_en), .b_we(pb_we), .b_addr(pb_addr), .b_wdata(pb_wdata), .b_rdata
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit key[], got[];
  int sa, sb;

  task automatic read_all();
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); tb_en = 1; tb_we = 0; tb_addr = AW'(w);
      @(negedge clk); tb_en = 0;
      for (int i = 0; i < 64; i++) got[w*64+i] = a_rdata[i];
    end
  endtask

  task automatic run_pass();
    int cyc = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 10*N) begin @(negedge clk); cyc++; end
    check(done, "pass finishes");
    check(cyc == 2*N, $sformatf("pass takes 2 clocks per exchange (%0d)", cyc));
    for (int i = 0; i < N; i++) begin
      bit t;
      t = key[sa]; key[sa] = key[sb]; key[sb] = t;
      sa = lfsr_next(sa, LW);
      sb = lfsr_next(sb, LW);
    end
    read_all();
    check(got == key, "key equals reference permutation");
  endtask

  initial begin
    key = new[N]; got = new[N];
    load_seed = 0; start = 0; seed_a = 5; seed_b = 78;
    tb_en = 0; tb_we = 0; tb_addr = '0; tb_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (key[i]) key[i] = 1'($urandom);
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); tb_en = 1; tb_we = 1; tb_addr = AW'(w);
      for (int i = 0; i < 64; i++) tb_wdata[i] = key[w*64+i];
    end
    @(negedge clk); tb_en = 0; tb_we = 0;
    load_seed = 1;
    @(negedge clk); load_seed = 0;
    sa = 5; sb = 78;
    run_pass();
    run_pass();
    // zero seed is replaced by 1
    seed_a = 0; seed_b = 3;
    @(negedge clk); load_seed = 1;
    @(negedge clk); load_seed = 0;
    sa = 1; sb = 3;
    run_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
