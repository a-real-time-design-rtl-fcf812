// recon_ctrl: pass controller of a reconciliation module.
//
// Runs the protocol steps on one side. start begins a reconciliation with
// block length n0 = 2^lg_n0 (from n0_select) and loads the permutation
// seeds. Each pass is: parity comparison of all blocks of n = 2^lg_n bits;
// if no block differs, or n has reached half the key length, go to the CRC
// check; otherwise run the Hamming correction of the differing blocks,
// permute the key string, double n and start the next pass. The final step
// computes the 64-bit CRC of the key, sends it to the other side through the
// data bus (requester REQ_CTRL), receives the other side's CRC and compares:
// key_ok = 1 means the key is kept, 0 that it must be discarded. done then
// stays high until the next start.
//
// The phase output tells the reconciliation module which unit owns the key
// RAM. leak_bits counts the information disclosed on the channel: one bit
// per block parity, lg_n syndrome bits per differing block, and the 64 CRC
// bits, for the privacy amplification stage that follows. The steps and the
// termination rule are the paper's; the exact leak accounting and the CRC
// exchange (both sides send, both compare) are this design's choice.
module recon_ctrl
  import qkd_er_pkg::*;
#(
  parameter int unsigned KEY_BITS = 65536
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [4:0]                  lg_n0,
  // unit control
  output phase_e                      phase,
  output logic [4:0]                  lg_n,
  output logic                        load_seed,
  output logic                        start_parity,
  output logic                        start_hamming,
  output logic                        start_permute,
  output logic                        start_crc,
  input  logic                        parity_done,
  input  logic [$clog2(KEY_BITS/8):0] mismatch_cnt,
  input  logic                        hamming_done,
  input  logic                        permute_done,
  input  logic                        crc_done,
  input  logic [63:0]                 crc,
  // data bus
  output logic                        req,
  output logic                        tx_valid,
  output word_t                       tx_data,
  input  logic                        tx_ready,
  input  logic                        rx_valid,
  input  word_t                       rx_data,
  output logic                        rx_ready,
  // status
  output logic                        done,
  output logic                        key_ok,
  output logic [4:0]                  passes,
  output logic [31:0]                 leak_bits
);
  localparam int unsigned LG_HALF = $clog2(KEY_BITS) - 1;

  logic sent;

  assign req      = (phase == PH_XCHG);
  assign tx_valid = (phase == PH_XCHG) && !sent;
  assign tx_data  = crc;
  assign rx_ready = (phase == PH_XCHG) && sent;
  assign done     = (phase == PH_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase         <= PH_IDLE;
      lg_n          <= 5'(MIN_LG_N);
      load_seed     <= 1'b0;
      start_parity  <= 1'b0;
      start_hamming <= 1'b0;
      start_permute <= 1'b0;
      start_crc     <= 1'b0;
      sent          <= 1'b0;
      key_ok        <= 1'b0;
      passes        <= '0;
      leak_bits     <= '0;
    end else begin
      load_seed     <= 1'b0;
      start_parity  <= 1'b0;
      start_hamming <= 1'b0;
      start_permute <= 1'b0;
      start_crc     <= 1'b0;
      case (phase)
        PH_IDLE, PH_DONE: begin
          if (start) begin
            phase        <= PH_PARITY;
            lg_n         <= lg_n0;
            load_seed    <= 1'b1;
            start_parity <= 1'b1;
            key_ok       <= 1'b0;
            passes       <= '0;
            leak_bits    <= '0;
          end
        end
        PH_PARITY: begin
          if (parity_done) begin
            passes    <= passes + 1'b1;
            leak_bits <= leak_bits + 32'(KEY_BITS >> lg_n);
            if (mismatch_cnt == '0 || lg_n >= 5'(LG_HALF)) begin
              phase     <= PH_CRC;
              start_crc <= 1'b1;
            end else begin
              phase         <= PH_HAMMING;
              start_hamming <= 1'b1;
            end
          end
        end
        PH_HAMMING: begin
          if (hamming_done) begin
            leak_bits     <= leak_bits + 32'(mismatch_cnt) * 32'(lg_n);
            phase         <= PH_PERMUTE;
            start_permute <= 1'b1;
          end
        end
        PH_PERMUTE: begin
          if (permute_done) begin
            lg_n         <= lg_n + 1'b1;
            phase        <= PH_PARITY;
            start_parity <= 1'b1;
          end
        end
        PH_CRC: begin
          if (crc_done) begin
            phase <= PH_XCHG;
            sent  <= 1'b0;
          end
        end
        PH_XCHG: begin
          if (!sent && tx_ready) sent <= 1'b1;
          if (sent && rx_valid) begin
            key_ok    <= (rx_data == crc);
            leak_bits <= leak_bits + 32'd64;
            phase     <= PH_DONE;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

endmodule
