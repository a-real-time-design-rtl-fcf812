// permute: permutation module.
//
// Between passes the whole key string is permuted so that errors which met
// in one block (and cancelled in its parity) land in different blocks of
// the next pass. Two LFSRs of log2(KEY_BITS) bits, started from two
// different seeds, produce sequences a_i and b_i; for i = 0 .. KEY_BITS-1 the
// key bits at positions a_i and b_i are exchanged. Both sides use the same
// seeds, so they apply the same permutation. The LFSRs are loaded once per
// reconciliation (load_seed) and keep running from pass to pass, so every
// pass gets a new permutation.
//
// Each exchange takes two clocks on the dual-ported key RAM: the words
// holding a_i and b_i are read through ports A and B, then written back with
// the two bits exchanged (through port A alone when both bits are in the
// same word). A pass therefore takes 2*KEY_BITS clocks; done pulses after
// the last exchange. Two reads and two writes per exchange on a memory
// with two ports cannot be done in fewer than two clocks, so consecutive
// exchanges are not overlapped; the LFSRs step during the write clock.
// Follows the paper: two LFSR sequences with seeds of key-length width,
// exchange of bits a_i and b_i for i from 0 to N-1, seeds 5 and 78 of its
// evaluation as defaults. This design's choice: continuing the LFSRs
// across passes, the bit position equal to the LFSR state (position 0 is
// never drawn), two clocks per exchange.
module permute
  import qkd_er_pkg::*;
#(
  parameter int unsigned KEY_BITS = 65536
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              load_seed,
  input  logic [$clog2(KEY_BITS)-1:0]       seed_a,
  input  logic [$clog2(KEY_BITS)-1:0]       seed_b,
  input  logic                              start,
  // key RAM port A
  output logic                              a_en,
  output logic                              a_we,
  output logic [$clog2(KEY_BITS/WORD_W)-1:0] a_addr,
  output word_t                             a_wdata,
  input  word_t                             a_rdata,
  // key RAM port B
  output logic                              b_en,
  output logic                              b_we,
  output logic [$clog2(KEY_BITS/WORD_W)-1:0] b_addr,
  output word_t                             b_wdata,
  input  word_t                             b_rdata,
  output logic                              done
);
  localparam int unsigned LW = $clog2(KEY_BITS);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WR} state_e;
  state_e state;

  logic [LW-1:0] pos_a, pos_b;
  logic [LW:0]   i_cnt;
  logic          step;

  lfsr #(.WIDTH(LW)) u_lfsr_a (.clk, .rst_n, .load(load_seed), .seed(seed_a),
                               .step(step), .state(pos_a));
  lfsr #(.WIDTH(LW)) u_lfsr_b (.clk, .rst_n, .load(load_seed), .seed(seed_b),
                               .step(step), .state(pos_b));

  logic  same_word, bit_a, bit_b;
  word_t wa, wb;

  always_comb begin
    same_word = (pos_a[LW-1:6] == pos_b[LW-1:6]);
    bit_a     = a_rdata[pos_a[5:0]];
    bit_b     = b_rdata[pos_b[5:0]];
    wa        = a_rdata;
    wb        = b_rdata;
    wa[pos_a[5:0]] = bit_b;
    wb[pos_b[5:0]] = bit_a;
    if (same_word) wa[pos_b[5:0]] = bit_a;
  end

  assign step    = (state == S_WR);
  assign a_en    = (state == S_RD) || (state == S_WR);
  assign a_we    = (state == S_WR);
  assign a_addr  = pos_a[LW-1:6];
  assign a_wdata = wa;
  assign b_en    = (state == S_RD) || ((state == S_WR) && !same_word);
  assign b_we    = (state == S_WR) && !same_word;
  assign b_addr  = pos_b[LW-1:6];
  assign b_wdata = wb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i_cnt <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RD;
          i_cnt <= '0;
        end
        S_RD: state <= S_WR;
        S_WR: begin
          i_cnt <= i_cnt + 1'b1;
          if (i_cnt == (LW+1)'(KEY_BITS-1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
