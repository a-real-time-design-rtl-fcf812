// qkd_er_pkg: constants, types and pure functions shared by the error
// reconciliation design.
//
// The key string of one reconciliation module is stored as 64-bit words;
// bit q of the key lives in word q/64, bit position q%64. Every message on
// the classical channel is one 64-bit word as well. The functions below are
// combinational: the CRC-64 step folds a whole 64-bit word in one clock
// (an XOR network), the syndrome helper produces the six low Hamming
// syndrome bits of a word, with the matrix rows generated by shifting
// instead of being stored, as the paper proposes.
//
// Own choices (the paper gives none of these): CRC-64/ECMA-182 polynomial,
// zero initial value, MSB-first bit order; the LFSR tap table (maximal
// length taps for widths 3..20); one message per 64-bit channel word.
package qkd_er_pkg;

  localparam int unsigned WORD_W   = 64;   // key word and channel word width
  localparam int unsigned MIN_LG_N = 3;    // smallest block: 8 bits (paper)

  // n0*p <= 0.8 with p given as floor(p * 2^16): 0.8 * 2^16 = 52428.8
  localparam int unsigned N0P_LIMIT_Q16 = 52428;

  localparam logic [63:0] CRC64_POLY = 64'h42F0_E1EB_A9EA_3693;

  typedef logic [WORD_W-1:0] word_t;

  // Phase of the pass controller; also selects who owns the key RAM ports.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_PARITY  = 3'd1,
    PH_HAMMING = 3'd2,
    PH_PERMUTE = 3'd3,
    PH_CRC     = 3'd4,
    PH_XCHG    = 3'd5,
    PH_DONE    = 3'd6
  } phase_e;

  // Requesters of the interface module's data bus.
  localparam int unsigned REQ_PARITY  = 0;
  localparam int unsigned REQ_HAMMING = 1;
  localparam int unsigned REQ_CTRL    = 2;
  localparam int unsigned NUM_REQ     = 3;

  // One CRC-64 step over a 64-bit word, MSB first.
  function automatic logic [63:0] crc64_word(input logic [63:0] crc,
                                             input logic [63:0] d);
    logic [63:0] c;
    logic        fb;
    c = crc;
    for (int i = 63; i >= 0; i--) begin
      fb = c[63] ^ d[i];
      c  = {c[62:0], 1'b0};
      if (fb) c = c ^ CRC64_POLY;
    end
    return c;
  endfunction

  // Six low syndrome bits of a word: bit i is the parity of the word ANDed
  // with Hamming matrix row i+1, whose element in column j is bit i of j.
  function automatic logic [5:0] syn_low6(input logic [63:0] w);
    logic [5:0] s;
    logic [63:0] row;
    for (int i = 0; i < 6; i++) begin
      for (int j = 0; j < 64; j++) row[j] = 1'((j >> i) & 1);
      s[i] = ^(w & row);
    end
    return s;
  endfunction

  // Feedback taps (1-based bit numbers, up to four) of a maximal-length
  // Fibonacci LFSR of the given width, packed as four 5-bit fields; an
  // unused field is 0.
  function automatic logic [19:0] lfsr_taps(input int unsigned width);
    case (width)
      3:  return {5'd3,  5'd2,  5'd0,  5'd0};
      4:  return {5'd4,  5'd3,  5'd0,  5'd0};
      5:  return {5'd5,  5'd3,  5'd0,  5'd0};
      6:  return {5'd6,  5'd5,  5'd0,  5'd0};
      7:  return {5'd7,  5'd6,  5'd0,  5'd0};
      8:  return {5'd8,  5'd6,  5'd5,  5'd4};
      9:  return {5'd9,  5'd5,  5'd0,  5'd0};
      10: return {5'd10, 5'd7,  5'd0,  5'd0};
      11: return {5'd11, 5'd9,  5'd0,  5'd0};
      12: return {5'd12, 5'd6,  5'd4,  5'd1};
      13: return {5'd13, 5'd4,  5'd3,  5'd1};
      14: return {5'd14, 5'd5,  5'd3,  5'd1};
      15: return {5'd15, 5'd14, 5'd0,  5'd0};
      16: return {5'd16, 5'd15, 5'd13, 5'd4};
      17: return {5'd17, 5'd14, 5'd0,  5'd0};
      18: return {5'd18, 5'd11, 5'd0,  5'd0};
      19: return {5'd19, 5'd6,  5'd2,  5'd1};
      default: return {5'd20, 5'd17, 5'd0, 5'd0};
    endcase
  endfunction

endpackage
