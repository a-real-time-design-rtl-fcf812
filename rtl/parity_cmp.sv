// parity_cmp: parity comparison module.
//
// One pass of the reconciliation divides the key string into blocks of
// n = 2^lg_n bits (8 <= n <= KEY_BITS/2) and compares the parity of every
// block on both sides. Parities are packed 64 to a channel word: bit t of
// parity word k is the parity of block 64k+t, unused bits of the last word
// are 0. Each parity is a reduction XOR, so a key word of 64 bits gives 8,
// 4 or 2 block parities in one clock for n = 8, 16, 32, and a partial
// parity for n >= 64 that is accumulated over n/64 words.
//
// Roles (is_alice): Bob computes his parity words and sends them; Alice
// computes hers, takes Bob's word for the same blocks from the incoming
// FIFO, and forms diff = mine ^ his, in which a 1 marks a block with
// differing parity. Alice writes diff into the mismatch record (mm_*) and
// sends it back, so that Bob, who receives it after sending all his
// parities, writes the same record. Both sides end with the count of
// differing blocks (mismatch_cnt) and done pulses.
//
// Pipeline (the paper's read data / compute parity / format result / send
// result): a key word is read every clock, its parities are folded into the
// word being assembled the next clock, and a finished parity word waits in
// an output register while the next words are read, so the reads stall
// only while a finished word cannot yet leave. Latency is about one clock
// per key word plus one per parity word.
// Follows the paper: block division, one-clock parities, Alice compares
// after receiving Bob's parities, record of the differing blocks handed to
// the Hamming module. This design's choice: the packing, sending diff back
// as the record, the bit-vector form of the record.
module parity_cmp
  import qkd_er_pkg::*;
#(
  parameter int unsigned KEY_BITS = 65536
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       is_alice,
  input  logic [4:0]                 lg_n,
  // key RAM read port
  output logic                       ram_en,
  output logic [$clog2(KEY_BITS/WORD_W)-1:0] ram_addr,
  input  word_t                      ram_rdata,
  // data bus
  output logic                       req,
  output logic                       tx_valid,
  output word_t                      tx_data,
  input  logic                       tx_ready,
  input  logic                       rx_valid,
  input  word_t                      rx_data,
  output logic                       rx_ready,
  // mismatch record write port
  output logic                       mm_we,
  output logic [$clog2(KEY_BITS/512)-1:0] mm_addr,
  output word_t                      mm_wdata,
  // status
  output logic                       done,
  output logic [$clog2(KEY_BITS/8):0] mismatch_cnt
);
  localparam int unsigned NW  = KEY_BITS / WORD_W;     // key words
  localparam int unsigned AW  = $clog2(NW);
  localparam int unsigned PWM = KEY_BITS / 512;        // parity words at n = 8
  localparam int unsigned PAW = $clog2(PWM);
  localparam int unsigned CW  = $clog2(KEY_BITS/8) + 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_RECV} state_e;
  state_e state;

  logic [AW-1:0]  rd_addr, d_addr;
  logic           issuing, d_valid;
  word_t          acc, ob;
  logic [6:0]     cnt;
  logic           ob_valid;
  logic [PAW-1:0] ob_idx;
  logic           blk_par;

  // parity words in this pass: ceil((KEY_BITS >> lg_n) / 64)
  logic [PAW:0]   pw_total;
  assign pw_total = (PAW+1)'(((KEY_BITS >> lg_n) + 63) >> 6);

  // ---- stage 2: parities of the word read in the previous clock ----
  word_t       chunk;
  logic [6:0]  k_bits;
  logic        d_last_key;
  logic [AW-1:0] wpb_mask;

  always_comb begin
    chunk    = '0;
    k_bits   = '0;
    wpb_mask = AW'((1 << (lg_n - 5'd6)) - 1);
    case (lg_n)
      5'd3: begin
        for (int i = 0; i < 8; i++) chunk[i] = ^ram_rdata[8*i +: 8];
        k_bits = 7'd8;
      end
      5'd4: begin
        for (int i = 0; i < 4; i++) chunk[i] = ^ram_rdata[16*i +: 16];
        k_bits = 7'd4;
      end
      5'd5: begin
        for (int i = 0; i < 2; i++) chunk[i] = ^ram_rdata[32*i +: 32];
        k_bits = 7'd2;
      end
      default: begin
        // n >= 64: one parity when the block's last word arrives
        chunk[0] = blk_par ^ (^ram_rdata);
        k_bits   = ((d_addr & wpb_mask) == wpb_mask) ? 7'd1 : 7'd0;
      end
    endcase
  end

  assign d_last_key = (d_addr == AW'(NW-1));

  logic  complete_now;
  word_t acc_next;
  logic [6:0] cnt_next;
  always_comb begin
    acc_next     = (k_bits == '0) ? acc : (acc | (chunk << cnt));
    cnt_next     = cnt + k_bits;
    complete_now = d_valid && ((cnt_next == 7'd64) || d_last_key);
  end

  // ---- result consumption ----
  word_t diff;
  logic  consume;
  assign diff = ob ^ rx_data;

  always_comb begin
    tx_valid = 1'b0;
    tx_data  = ob;
    rx_ready = 1'b0;
    consume  = 1'b0;
    mm_we    = 1'b0;
    mm_addr  = ob_idx;
    mm_wdata = diff;
    if (state == S_RUN && ob_valid) begin
      if (is_alice) begin
        tx_valid = rx_valid;
        tx_data  = diff;
        rx_ready = tx_ready;
        consume  = rx_valid && tx_ready;
        mm_we    = consume;
      end else begin
        tx_valid = 1'b1;
        consume  = tx_ready;
      end
    end else if (state == S_RECV) begin
      rx_ready = 1'b1;
      mm_we    = rx_valid;
      mm_wdata = rx_data;
      consume  = rx_valid;
    end
  end

  function automatic logic [6:0] popcount64(input word_t w);
    logic [6:0] c;
    c = '0;
    for (int i = 0; i < 64; i++) c = c + 7'(w[i]);
    return c;
  endfunction

  logic issue;
  assign issue   = (state == S_RUN) && issuing && !ob_valid && !complete_now;
  assign ram_en  = issue;
  assign ram_addr = rd_addr;
  assign req     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      rd_addr      <= '0;
      d_addr       <= '0;
      issuing      <= 1'b0;
      d_valid      <= 1'b0;
      acc          <= '0;
      cnt          <= '0;
      ob           <= '0;
      ob_valid     <= 1'b0;
      ob_idx       <= '0;
      blk_par      <= 1'b0;
      done         <= 1'b0;
      mismatch_cnt <= '0;
    end else begin
      done    <= 1'b0;
      d_valid <= issue;
      if (issue) begin
        d_addr  <= rd_addr;
        rd_addr <= rd_addr + 1'b1;
        if (rd_addr == AW'(NW-1)) issuing <= 1'b0;
      end
      case (state)
        S_IDLE: begin
          if (start) begin
            state        <= S_RUN;
            rd_addr      <= '0;
            issuing      <= 1'b1;
            acc          <= '0;
            cnt          <= '0;
            ob_valid     <= 1'b0;
            ob_idx       <= '0;
            blk_par      <= 1'b0;
            mismatch_cnt <= '0;
          end
        end
        S_RUN: begin
          if (d_valid) begin
            if (lg_n >= 5'd6)
              blk_par <= (k_bits != 0) ? 1'b0 : chunk[0];
            if (complete_now) begin
              ob       <= acc_next;
              ob_valid <= 1'b1;
              acc      <= '0;
              cnt      <= '0;
            end else begin
              acc <= acc_next;
              cnt <= cnt_next;
            end
          end
          if (consume) begin
            ob_valid <= 1'b0;
            ob_idx   <= ob_idx + 1'b1;
            if (is_alice) mismatch_cnt <= mismatch_cnt + CW'(popcount64(diff));
            if ((PAW+1)'(ob_idx) == pw_total - 1'b1) begin
              ob_idx <= '0;
              if (is_alice) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                state <= S_RECV;
              end
            end
          end
        end
        S_RECV: begin
          if (consume) begin
            ob_idx       <= ob_idx + 1'b1;
            mismatch_cnt <= mismatch_cnt + CW'(popcount64(rx_data));
            if ((PAW+1)'(ob_idx) == pw_total - 1'b1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
