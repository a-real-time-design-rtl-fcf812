// tb_workload_dtot: separation quality of the permutation on a full 64 Kbit
// key, the measure D_tot used to judge the two-LFSR permutation.
//
// Definition: in pass i-1 the key is cut into blocks of n_{i-1} = n_i/2
// bits. Two bits of one such block are "neighbours" if, after the
// permutation g, they also share a block of n_i bits. D_p is the fraction
// of the other n_{i-1}-1 bits of p's block that are not neighbours of p, and
// D_tot is the mean of D_p over all N bits (1 = perfect separation). For a
// random permutation D_tot is about 1 - (n_i-1)/(N-1).
//
// How: the map g of one pass of the permute module (seeds 5 and 78, 16-bit
// LFSRs, KEY_BITS = 65536 at its default) is read out of the hardware with
// 16 runs: before run j every key bit q holds bit j of q, so after the run
// bit m holds bit j of g^-1(m). The map is checked against the swap
// sequence of recon_model_pkg, then D_tot is computed for n_i = 16 .. 32768
// with one histogram per old block. The same model sequence gives D_tot at
// n_i = 16 for a sample of 64 second seeds (first seed 5).
//
// Checks: the hardware map is a permutation and equals the model; D_tot at
// n_i = 16 is above 0.99 for seeds 5/78; D_tot is at most 0.75 for
// n_i = 32768; most sampled seeds give D_tot above 0.99 at n_i = 16. Each
// permutation run takes 2*N clocks. The watchdog ends the test after
// 4,000,000 clocks.
`timescale 1ns/1ps
module tb_workload_dtot;
  import qkd_er_pkg::*;
  import recon_model_pkg::*;

  localparam int unsigned N  = 65536;
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
  logic          tb_en, tb_we;
  logic [AW-1:0] tb_addr;
  word_t         tb_wdata;

  permute dut (
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

  // src[m] = original position of the bit found at m after one pass
  int hw_src[], ref_src[], g[];

  function automatic void model_src(int sa0, int sb0, ref int src[]);
    int sa, sb, t;
    sa = (sa0 == 0) ? 1 : sa0;
    sb = (sb0 == 0) ? 1 : sb0;
    foreach (src[m]) src[m] = m;
    for (int i = 0; i < N; i++) begin
      t = src[sa]; src[sa] = src[sb]; src[sb] = t;
      sa = lfsr_next(sa, LW);
      sb = lfsr_next(sb, LW);
    end
  endfunction

  // D_tot for new block length ni (old block length ni/2), g = forward map
  function automatic real dtot(ref int gm[], input int ni);
    int no = ni / 2;
    int cnt [int];
    real sum = 0.0;
    for (int b = 0; b < N / no; b++) begin
      cnt.delete();
      for (int q = b*no; q < (b+1)*no; q++) begin
        int k = gm[q] / ni;
        if (cnt.exists(k)) cnt[k]++; else cnt[k] = 1;
      end
      for (int q = b*no; q < (b+1)*no; q++)
        sum += 1.0 - real'(cnt[gm[q] / ni] - 1) / real'(no - 1);
    end
    return sum / real'(N);
  endfunction

  int cyc_bad = 0;

  task automatic run_plane(int j);
    int cyc;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); tb_en = 1; tb_we = 1; tb_addr = AW'(w);
      for (int i = 0; i < 64; i++) tb_wdata[i] = 1'((w*64 + i) >> j);
    end
    @(negedge clk); tb_en = 0; tb_we = 0; load_seed = 1;
    @(negedge clk); load_seed = 0; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 4*N) begin @(negedge clk); cyc++; end
    if (cyc != 2*N) cyc_bad++;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk); tb_en = 1; tb_we = 0; tb_addr = AW'(w);
      @(negedge clk); tb_en = 0;
      for (int i = 0; i < 64; i++) hw_src[w*64 + i] |= int'(a_rdata[i]) << j;
    end
  endtask

  initial begin
    bit seen[];
    bit is_perm;
    real d, d16, d_last;
    int good;
    hw_src = new[N]; ref_src = new[N]; g = new[N]; seen = new[N];
    load_seed = 0; start = 0; seed_a = 5; seed_b = 78;
    tb_en = 0; tb_we = 0; tb_addr = '0; tb_wdata = '0;
    foreach (hw_src[m]) hw_src[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < LW; j++) run_plane(j);
    check(cyc_bad == 0, "each permutation run takes 2*N clocks");

    is_perm = 1;
    foreach (hw_src[m]) begin
      if (seen[hw_src[m]]) is_perm = 0;
      seen[hw_src[m]] = 1;
    end
    check(is_perm, "hardware map is a permutation");
    model_src(5, 78, ref_src);
    check(hw_src == ref_src, "hardware map equals the model swap sequence");

    foreach (hw_src[m]) g[hw_src[m]] = m;
    d16 = 0.0;
    d_last = 0.0;
    for (int lg = 4; lg <= LW - 1; lg++) begin
      d = dtot(g, 1 << lg);
      $display("seeds 5/78: n_i=%0d D_tot=%0.4f (random permutation %0.4f)",
               1 << lg, d, 1.0 - real'((1 << lg) - 1) / real'(N - 1));
      if (lg == 4) d16 = d;
      d_last = d;
    end
    check(d16 > 0.99, $sformatf("D_tot at n_i=16 above 0.99 (%0.4f)", d16));
    check(d_last <= 0.75, $sformatf("D_tot at n_i=32768 at most 0.75 (%0.4f)", d_last));

    good = 0;
    for (int k = 0; k < 64; k++) begin
      int sb = 1 + k * 1024 + 37;
      model_src(5, sb, ref_src);
      foreach (ref_src[m]) g[ref_src[m]] = m;
      d = dtot(g, 16);
      if (d > 0.99) good++;
      else $display("seeds 5/%0d: D_tot=%0.4f at n_i=16", sb, d);
    end
    $display("sampled second seeds with D_tot > 0.99 at n_i=16: %0d of 64", good);
    check(good >= 48, "most sampled seeds separate well");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
