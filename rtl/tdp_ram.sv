// tdp_ram: true dual-port synchronous RAM.
//
// Holds the 64 Kbit key string of a reconciliation module (1024 words of 64
// bits) and, in a smaller instance, the record of blocks whose parities
// differ. Each port reads or writes one word per clock; a read returns the
// word one clock after the address is presented (registered output, as in
// FPGA block RAM). A read of a word that the same port writes in the same
// cycle returns the old contents. Writing one address from both ports in
// the same cycle is not allowed (assertion); the users never do it.
// The paper only says the key is kept in the FPGA's RAM; word width and port
// count are this design's choice.
module tdp_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       a_en,
  input  logic                       a_we,
  input  logic [$clog2(DEPTH)-1:0]   a_addr,
  input  logic [WIDTH-1:0]           a_wdata,
  output logic [WIDTH-1:0]           a_rdata,
  input  logic                       b_en,
  input  logic                       b_we,
  input  logic [$clog2(DEPTH)-1:0]   b_addr,
  input  logic [WIDTH-1:0]           b_wdata,
  output logic [WIDTH-1:0]           b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end

  a_no_write_collision: assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr));

endmodule
