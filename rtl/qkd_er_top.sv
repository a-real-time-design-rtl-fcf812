// qkd_er_top: error reconciliation engine of one side of a QKD link.
//
// NUM_MODULES independent reconciliation modules, each handling KEY_BITS of
// sifted key with its own pair of channel FIFOs; with the defaults, eight
// modules of 64 Kbit reconcile 512 Kbit at once. All modules share the role
// (is_alice), the estimated error rate p_q16 = floor(p * 2^16), the two
// permutation seeds and the start pulse, and run in parallel. Key words are
// loaded and read back through one port with a module select (key_sel);
// read data follows one clock after the address. Each module's channel
// streams (valid/ready, 64-bit words) are brought out separately; the
// transport between the two sides (USB to a PC and a network link in the
// paper's system) is outside this design. all_done rises when every module
// has finished; key_ok[m] says whether module m's CRC check passed.
// Eight modules and 64 Kbit per module are the paper's figures; the shared
// control inputs and the load port are this design's choice.
module qkd_er_top
  import qkd_er_pkg::*;
#(
  parameter int unsigned NUM_MODULES = 8,
  parameter int unsigned KEY_BITS    = 65536,
  parameter int unsigned FIFO_DEPTH  = 512
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                is_alice,
  input  logic                                start,
  input  logic [15:0]                         p_q16,
  input  logic [$clog2(KEY_BITS)-1:0]         seed_a,
  input  logic [$clog2(KEY_BITS)-1:0]         seed_b,
  // key load / read back
  input  logic [$clog2(NUM_MODULES)-1:0]      key_sel,
  input  logic                                key_en,
  input  logic                                key_we,
  input  logic [$clog2(KEY_BITS/WORD_W)-1:0]  key_addr,
  input  word_t                               key_wdata,
  output word_t                               key_rdata,
  // classical channel, one stream pair per module
  input  logic [NUM_MODULES-1:0]              ch_rx_valid,
  input  word_t                               ch_rx_data [NUM_MODULES],
  output logic [NUM_MODULES-1:0]              ch_rx_ready,
  output logic [NUM_MODULES-1:0]              ch_tx_valid,
  output word_t                               ch_tx_data [NUM_MODULES],
  input  logic [NUM_MODULES-1:0]              ch_tx_ready,
  // status
  output logic                                all_done,
  output logic [NUM_MODULES-1:0]              busy,
  output logic [NUM_MODULES-1:0]              done,
  output logic [NUM_MODULES-1:0]              key_ok,
  output logic [4:0]                          passes      [NUM_MODULES],
  output logic [31:0]                         leak_bits   [NUM_MODULES],
  output logic [31:0]                         fixed_cnt   [NUM_MODULES],
  output logic [31:0]                         wait_cycles [NUM_MODULES]
);
  word_t                          rdata [NUM_MODULES];
  logic [$clog2(NUM_MODULES)-1:0] sel_q;

  for (genvar m = 0; m < NUM_MODULES; m++) begin : g_mod
    recon_module #(.KEY_BITS(KEY_BITS), .FIFO_DEPTH(FIFO_DEPTH)) u_mod (
      .clk, .rst_n, .is_alice, .start, .p_q16, .seed_a, .seed_b,
      .key_en(key_en && key_sel == m), .key_we, .key_addr, .key_wdata,
      .key_rdata(rdata[m]),
      .ch_rx_valid(ch_rx_valid[m]), .ch_rx_data(ch_rx_data[m]), .ch_rx_ready(ch_rx_ready[m]),
      .ch_tx_valid(ch_tx_valid[m]), .ch_tx_data(ch_tx_data[m]), .ch_tx_ready(ch_tx_ready[m]),
      .busy(busy[m]), .done(done[m]), .key_ok(key_ok[m]),
      .passes(passes[m]), .leak_bits(leak_bits[m]),
      .fixed_cnt(fixed_cnt[m]), .wait_cycles(wait_cycles[m])
    );
  end

  always_ff @(posedge clk) if (key_en) sel_q <= key_sel;

  assign key_rdata = rdata[sel_q];
  assign all_done  = &done;

endmodule
