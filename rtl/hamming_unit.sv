// hamming_unit: Hamming code module.
//
// For every block whose parity differed in the current pass (a 1 in the
// mismatch record), both sides compute the block's Hamming syndrome and Bob
// corrects one bit. With n = 2^lg_n bits per block, the syndrome has
// r = lg_n bits: bit i (i = 1..r) is the parity of the block ANDed with row
// i of the Hamming matrix, whose element in column j is bit i-1 of j
// (h_ij = floor(j / 2^(i-1)) mod 2). The rows are generated, not stored.
// Column j is the block-local bit position 0..n-1; position 0 has an all-zero
// column and is identified by a zero syndrome difference, which is possible
// because the block's parity is already known to differ. A single error at
// local position e therefore gives syndrome(Alice) ^ syndrome(Bob) = e.
// Blocks with more than one error may receive a wrong "correction", as the
// paper notes.
//
// Operation: the record is scanned one 64-bit word at a time and its set
// bits are taken lowest first. For each marked block the key words covering
// it are read back to back (one per clock, the syndrome is folded in the
// clock after each read); a word of n < 64 bits is masked to the block.
// Alice then sends her syndrome (one channel word, syndrome in the low
// bits); Bob waits for it, forms e, reads the key word holding bit
// block*n + e and writes it back with that bit inverted.
// corrected_cnt counts the blocks handled in the pass (on Bob's side, the
// bits flipped). done pulses when the record has been scanned.
// Follows the paper: matrix definition, XOR-AND products, correction of
// single-error blocks. This design's choice: r = lg_n, the zero column for
// position 0, message format and scan order.
module hamming_unit
  import qkd_er_pkg::*;
#(
  parameter int unsigned KEY_BITS = 65536
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       is_alice,
  input  logic [4:0]                 lg_n,
  // mismatch record read port
  output logic                       mm_en,
  output logic [$clog2(KEY_BITS/512)-1:0] mm_addr,
  input  word_t                      mm_rdata,
  // key RAM port
  output logic                       ram_en,
  output logic                       ram_we,
  output logic [$clog2(KEY_BITS/WORD_W)-1:0] ram_addr,
  output word_t                      ram_wdata,
  input  word_t                      ram_rdata,
  // data bus
  output logic                       req,
  output logic                       tx_valid,
  output word_t                      tx_data,
  input  logic                       tx_ready,
  input  logic                       rx_valid,
  input  word_t                      rx_data,
  output logic                       rx_ready,
  // status
  output logic                       done,
  output logic [$clog2(KEY_BITS/8):0] corrected_cnt
);
  localparam int unsigned NW  = KEY_BITS / WORD_W;
  localparam int unsigned AW  = $clog2(NW);
  localparam int unsigned PWM = KEY_BITS / 512;
  localparam int unsigned PAW = $clog2(PWM);
  localparam int unsigned QW  = $clog2(KEY_BITS);     // bit position width

  typedef enum logic [2:0] {S_IDLE, S_MMRD, S_MMWAIT, S_SCAN, S_RD, S_XFER,
                            S_FIXRD, S_FIXWR} state_e;
  state_e state;

  logic [PAW-1:0] mi;
  word_t          mw;
  logic [QW-1:0]  blk_base;     // first key bit of the block
  logic [AW-1:0]  rd_addr, d_addr, wd_first;
  logic [AW-1:0]  rd_left;      // words still to be read, minus one
  logic           rd_active, d_valid, d_last;
  logic [QW-1:0]  syn;
  logic [QW-1:0]  fix_pos;

  logic [PAW:0] pw_total;
  assign pw_total = (PAW+1)'(((KEY_BITS >> lg_n) + 63) >> 6);

  // lowest set bit of the record word
  logic [5:0] t_low;
  always_comb begin
    t_low = '0;
    for (int i = 63; i >= 0; i--) if (mw[i]) t_low = 6'(i);
  end

  // syndrome contribution of the word read in the previous clock
  logic [QW-1:0] syn_word;
  word_t         blk_mask;
  logic [AW-1:0] wo;
  always_comb begin
    blk_mask = '1;
    syn_word = '0;
    wo       = d_addr - wd_first;
    if (lg_n < 5'd6) begin
      blk_mask = ((64'd1 << (7'd1 << lg_n)) - 64'd1) << blk_base[5:0];
      syn_word = QW'(syn_low6(ram_rdata & blk_mask)) & QW'((1 << lg_n) - 1);
    end else begin
      syn_word = QW'(syn_low6(ram_rdata)) ^ ((^ram_rdata) ? (QW'(wo) << 6) : '0);
    end
  end

  // first key bit of the next marked block: (64*mi + t_low) * n
  logic [QW-1:0] next_base;
  assign next_base = QW'({mi, t_low}) << lg_n;

  logic [QW-1:0] err_pos;
  assign err_pos = blk_base + (rx_data[QW-1:0] ^ syn);

  logic issue;
  assign issue = (state == S_RD) && rd_active;

  always_comb begin
    mm_en     = (state == S_MMRD);
    mm_addr   = mi;
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = rd_addr;
    ram_wdata = ram_rdata ^ (64'd1 << fix_pos[5:0]);
    tx_valid  = 1'b0;
    tx_data   = word_t'(syn);
    rx_ready  = 1'b0;
    case (state)
      S_RD:    ram_en = issue;
      S_XFER: begin
        tx_valid = is_alice;
        rx_ready = !is_alice;
      end
      S_FIXRD: begin
        ram_en   = 1'b1;
        ram_addr = fix_pos[QW-1:6];
      end
      S_FIXWR: begin
        ram_en   = 1'b1;
        ram_we   = 1'b1;
        ram_addr = fix_pos[QW-1:6];
      end
      default: ;
    endcase
  end

  assign req = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      mi            <= '0;
      mw            <= '0;
      blk_base      <= '0;
      rd_addr       <= '0;
      d_addr        <= '0;
      wd_first      <= '0;
      rd_left       <= '0;
      rd_active     <= 1'b0;
      d_valid       <= 1'b0;
      d_last        <= 1'b0;
      syn           <= '0;
      fix_pos       <= '0;
      done          <= 1'b0;
      corrected_cnt <= '0;
    end else begin
      done    <= 1'b0;
      d_valid <= issue;
      d_last  <= issue && (rd_left == '0);
      if (issue) begin
        d_addr  <= rd_addr;
        rd_addr <= rd_addr + 1'b1;
        rd_left <= rd_left - 1'b1;
        if (rd_left == '0) rd_active <= 1'b0;
      end
      case (state)
        S_IDLE: begin
          if (start) begin
            state         <= S_MMRD;
            mi            <= '0;
            corrected_cnt <= '0;
          end
        end
        S_MMRD:   state <= S_MMWAIT;
        S_MMWAIT: begin
          mw    <= mm_rdata;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (mw == '0) begin
            if ((PAW+1)'(mi) == pw_total - 1'b1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              mi    <= mi + 1'b1;
              state <= S_MMRD;
            end
          end else begin
            blk_base  <= next_base;
            mw[t_low] <= 1'b0;
            rd_addr   <= next_base[QW-1:6];
            wd_first  <= next_base[QW-1:6];
            rd_left   <= (lg_n < 5'd6) ? '0 : AW'((1 << (lg_n - 5'd6)) - 1);
            rd_active <= 1'b1;
            syn       <= '0;
            state     <= S_RD;
          end
        end
        S_RD: begin
          if (d_valid) begin
            syn <= syn ^ syn_word;
            if (d_last) state <= S_XFER;
          end
        end
        S_XFER: begin
          if (is_alice) begin
            if (tx_ready) begin
              corrected_cnt <= corrected_cnt + 1'b1;
              state         <= S_SCAN;
            end
          end else if (rx_valid) begin
            fix_pos <= err_pos;
            state   <= S_FIXRD;
          end
        end
        S_FIXRD: state <= S_FIXWR;
        S_FIXWR: begin
          corrected_cnt <= corrected_cnt + 1'b1;
          state         <= S_SCAN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
