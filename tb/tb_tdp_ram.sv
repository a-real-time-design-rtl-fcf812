// tb_tdp_ram: random reads and writes on both ports of a 64x32 RAM compared
// with an array model; read data is checked one clock after the address.
`timescale 1ns/1ps
module tb_tdp_ram;
  localparam int unsigned D = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_en, a_we, b_en, b_we;
  logic [4:0] a_addr, b_addr;
  logic [63:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [63:0] model [D];
  logic [63:0] exp_a, exp_b;
  bit chk_a, chk_b;

  tdp_ram #(.WIDTH(64), .DEPTH(D)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                                        .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 5'(i); a_wdata = {$urandom, $urandom}; model[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (chk_a) check(a_rdata == exp_a, "port A read");
      if (chk_b) check(b_rdata == exp_b, "port B read");
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = 5'($urandom); a_wdata = {$urandom, $urandom};
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 5'($urandom); b_wdata = {$urandom, $urandom};
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) b_we = 0;
      chk_a = a_en; chk_b = b_en;
      exp_a = model[a_addr]; exp_b = model[b_addr];
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
