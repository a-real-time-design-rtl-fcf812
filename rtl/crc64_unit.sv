// crc64_unit: 64-bit cyclic redundancy check of the whole key string.
//
// After the last pass both sides compute a 64-bit CRC of their key strings
// and compare them: equal keeps the key, different discards it. This unit
// reads the key RAM word 0 to NUM_WORDS-1, one read per clock, and folds
// each word into the CRC in the clock after its read (one 64-bit step of
// qkd_er_pkg::crc64_word, an XOR network). start clears the CRC; done pulses
// one clock after the last word has been folded, with crc then valid and
// held until the next start. Latency: NUM_WORDS + 2 clocks from start.
// The paper names a 64-bit CRC only; polynomial (ECMA-182), zero initial
// value and MSB-first order are this design's choice.
module crc64_unit
  import qkd_er_pkg::*;
#(
  parameter int unsigned NUM_WORDS = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          ram_en,
  output logic [$clog2(NUM_WORDS)-1:0]  ram_addr,
  input  word_t                         ram_rdata,
  output logic                          done,
  output logic [63:0]                   crc
);
  localparam int unsigned AW = $clog2(NUM_WORDS);

  logic          busy, d_valid, d_last;
  logic [AW-1:0] addr_q;

  assign ram_en   = busy;
  assign ram_addr = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      addr_q  <= '0;
      d_valid <= 1'b0;
      d_last  <= 1'b0;
      done    <= 1'b0;
      crc     <= '0;
    end else begin
      done    <= 1'b0;
      d_valid <= busy;
      d_last  <= busy && (addr_q == AW'(NUM_WORDS-1));
      if (start) begin
        busy   <= 1'b1;
        addr_q <= '0;
        crc    <= '0;
      end else if (busy) begin
        addr_q <= addr_q + 1'b1;
        if (addr_q == AW'(NUM_WORDS-1)) busy <= 1'b0;
      end
      if (d_valid && !start) begin
        crc <= crc64_word(crc, ram_rdata);
        if (d_last) done <= 1'b1;
      end
    end
  end

endmodule
