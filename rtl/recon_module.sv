// recon_module: one reconciliation module (one side, 64 Kbit of key).
//
// The same module serves Alice (is_alice = 1) and Bob (is_alice = 0); the
// two sides run in lock step only through the words they exchange. The key
// string is written into the key RAM through the key_* port while the
// module is idle, start runs the whole reconciliation, and afterwards Bob's
// corrected key (and Alice's permuted one, identical if key_ok) is read back
// through the same port (read data one clock after the address).
//
// Inside: the interface module (incoming and outgoing FIFO, data bus and its
// control module) links the parity comparison module, the Hamming code
// module and the pass controller to the channel; the permutation module and
// the CRC unit work on the key RAM only. The units are not pipelined with
// each other, since every pass must finish its permutation before the next
// parity comparison; recon_ctrl runs them one after another and its phase
// selects which unit drives port A of the key RAM. Port B belongs to the
// permutation module. A second small RAM records which blocks' parities
// differ, written by the parity comparison and read by the Hamming module.
//
// Channel: a valid/ready stream of 64-bit words in each direction, meant to
// be connected (through any transport) to the corresponding streams of the
// other side's module. Counters: passes, leak_bits (disclosed bits),
// fixed_cnt (Hamming corrections over all passes; on Alice's side the
// syndromes sent), wait_cycles (clocks a unit waited for the other side).
// Composition, 64 Kbit per module and the role of each unit follow the
// paper; port naming, counters and the RAM port split are this design's.
module recon_module
  import qkd_er_pkg::*;
#(
  parameter int unsigned KEY_BITS   = 65536,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               is_alice,
  input  logic                               start,
  input  logic [15:0]                        p_q16,
  input  logic [$clog2(KEY_BITS)-1:0]        seed_a,
  input  logic [$clog2(KEY_BITS)-1:0]        seed_b,
  // key load / read back (only while idle or done)
  input  logic                               key_en,
  input  logic                               key_we,
  input  logic [$clog2(KEY_BITS/WORD_W)-1:0] key_addr,
  input  word_t                              key_wdata,
  output word_t                              key_rdata,
  // classical channel
  input  logic                               ch_rx_valid,
  input  word_t                              ch_rx_data,
  output logic                               ch_rx_ready,
  output logic                               ch_tx_valid,
  output word_t                              ch_tx_data,
  input  logic                               ch_tx_ready,
  // status
  output logic                               busy,
  output logic                               done,
  output logic                               key_ok,
  output logic [4:0]                         passes,
  output logic [31:0]                        leak_bits,
  output logic [31:0]                        fixed_cnt,
  output logic [31:0]                        wait_cycles
);
  localparam int unsigned NW  = KEY_BITS / WORD_W;
  localparam int unsigned AW  = $clog2(NW);
  localparam int unsigned PWM = KEY_BITS / 512;
  localparam int unsigned PAW = $clog2(PWM);
  localparam int unsigned CW  = $clog2(KEY_BITS/8) + 1;

  phase_e     phase;
  logic [4:0] lg_n, lg_n0;
  logic       load_seed, start_parity, start_hamming, start_permute, start_crc;
  logic       parity_done, hamming_done, permute_done, crc_done;
  logic [CW-1:0] mismatch_cnt, corrected_cnt;
  logic [63:0]   crc;

  // ---------------- interface module ----------------
  logic [NUM_REQ-1:0] req, grant, tx_valid, tx_ready, rx_valid, rx_ready;
  word_t              tx_data [NUM_REQ];
  word_t              rx_data;
  logic               rx_wait;

  recon_interface #(.NREQ(NUM_REQ), .WIDTH(WORD_W), .FIFO_DEPTH(FIFO_DEPTH)) u_if (
    .clk, .rst_n,
    .ch_rx_valid, .ch_rx_data, .ch_rx_ready,
    .ch_tx_valid, .ch_tx_data, .ch_tx_ready,
    .req, .grant, .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_ready, .rx_data,
    .rx_wait
  );

  // ---------------- memories ----------------
  logic          ka_en, ka_we, kb_en, kb_we;
  logic [AW-1:0] ka_addr, kb_addr;
  word_t         ka_wdata, kb_wdata, ka_rdata, kb_rdata;

  tdp_ram #(.WIDTH(WORD_W), .DEPTH(NW)) u_key_ram (
    .clk,
    .a_en(ka_en), .a_we(ka_we), .a_addr(ka_addr), .a_wdata(ka_wdata), .a_rdata(ka_rdata),
    .b_en(kb_en), .b_we(kb_we), .b_addr(kb_addr), .b_wdata(kb_wdata), .b_rdata(kb_rdata)
  );
  assign key_rdata = ka_rdata;

  logic           mm_we, mm_ren;
  logic [PAW-1:0] mm_waddr, mm_raddr;
  word_t          mm_wdata, mm_rdata;

  tdp_ram #(.WIDTH(WORD_W), .DEPTH(PWM)) u_mismatch_ram (
    .clk,
    .a_en(mm_we), .a_we(mm_we), .a_addr(mm_waddr), .a_wdata(mm_wdata), .a_rdata(),
    .b_en(mm_ren), .b_we(1'b0), .b_addr(mm_raddr), .b_wdata('0), .b_rdata(mm_rdata)
  );

  // ---------------- units ----------------
  n0_select #(.KEY_BITS(KEY_BITS)) u_n0 (.p_q16, .lg_n0);

  logic          pc_ram_en;
  logic [AW-1:0] pc_ram_addr;

  parity_cmp #(.KEY_BITS(KEY_BITS)) u_parity (
    .clk, .rst_n, .start(start_parity), .is_alice, .lg_n,
    .ram_en(pc_ram_en), .ram_addr(pc_ram_addr), .ram_rdata(ka_rdata),
    .req(req[REQ_PARITY]), .tx_valid(tx_valid[REQ_PARITY]), .tx_data(tx_data[REQ_PARITY]),
    .tx_ready(tx_ready[REQ_PARITY]), .rx_valid(rx_valid[REQ_PARITY]), .rx_data,
    .rx_ready(rx_ready[REQ_PARITY]),
    .mm_we, .mm_addr(mm_waddr), .mm_wdata,
    .done(parity_done), .mismatch_cnt
  );

  logic          hm_ram_en, hm_ram_we;
  logic [AW-1:0] hm_ram_addr;
  word_t         hm_ram_wdata;

  hamming_unit #(.KEY_BITS(KEY_BITS)) u_hamming (
    .clk, .rst_n, .start(start_hamming), .is_alice, .lg_n,
    .mm_en(mm_ren), .mm_addr(mm_raddr), .mm_rdata,
    .ram_en(hm_ram_en), .ram_we(hm_ram_we), .ram_addr(hm_ram_addr),
    .ram_wdata(hm_ram_wdata), .ram_rdata(ka_rdata),
    .req(req[REQ_HAMMING]), .tx_valid(tx_valid[REQ_HAMMING]), .tx_data(tx_data[REQ_HAMMING]),
    .tx_ready(tx_ready[REQ_HAMMING]), .rx_valid(rx_valid[REQ_HAMMING]), .rx_data,
    .rx_ready(rx_ready[REQ_HAMMING]),
    .done(hamming_done), .corrected_cnt
  );

  logic          pm_a_en, pm_a_we;
  logic [AW-1:0] pm_a_addr;
  word_t         pm_a_wdata;

  permute #(.KEY_BITS(KEY_BITS)) u_permute (
    .clk, .rst_n, .load_seed, .seed_a, .seed_b, .start(start_permute),
    .a_en(pm_a_en), .a_we(pm_a_we), .a_addr(pm_a_addr), .a_wdata(pm_a_wdata), .a_rdata(ka_rdata),
    .b_en(kb_en), .b_we(kb_we), .b_addr(kb_addr), .b_wdata(kb_wdata), .b_rdata(kb_rdata),
    .done(permute_done)
  );

  logic          crc_ram_en;
  logic [AW-1:0] crc_ram_addr;

  crc64_unit #(.NUM_WORDS(NW)) u_crc (
    .clk, .rst_n, .start(start_crc),
    .ram_en(crc_ram_en), .ram_addr(crc_ram_addr), .ram_rdata(ka_rdata),
    .done(crc_done), .crc
  );

  recon_ctrl #(.KEY_BITS(KEY_BITS)) u_ctrl (
    .clk, .rst_n, .start, .lg_n0,
    .phase, .lg_n, .load_seed, .start_parity, .start_hamming, .start_permute, .start_crc,
    .parity_done, .mismatch_cnt, .hamming_done, .permute_done, .crc_done, .crc,
    .req(req[REQ_CTRL]), .tx_valid(tx_valid[REQ_CTRL]), .tx_data(tx_data[REQ_CTRL]),
    .tx_ready(tx_ready[REQ_CTRL]), .rx_valid(rx_valid[REQ_CTRL]), .rx_data,
    .rx_ready(rx_ready[REQ_CTRL]),
    .done, .key_ok, .passes, .leak_bits
  );

  // ---------------- key RAM port A ownership ----------------
  always_comb begin
    ka_en    = 1'b0;
    ka_we    = 1'b0;
    ka_addr  = key_addr;
    ka_wdata = key_wdata;
    case (phase)
      PH_IDLE, PH_DONE: begin
        ka_en = key_en;
        ka_we = key_en & key_we;
      end
      PH_PARITY: begin
        ka_en   = pc_ram_en;
        ka_addr = pc_ram_addr;
      end
      PH_HAMMING: begin
        ka_en    = hm_ram_en;
        ka_we    = hm_ram_we;
        ka_addr  = hm_ram_addr;
        ka_wdata = hm_ram_wdata;
      end
      PH_PERMUTE: begin
        ka_en    = pm_a_en;
        ka_we    = pm_a_we;
        ka_addr  = pm_a_addr;
        ka_wdata = pm_a_wdata;
      end
      PH_CRC: begin
        ka_en   = crc_ram_en;
        ka_addr = crc_ram_addr;
      end
      default: ;
    endcase
  end

  assign busy = (phase != PH_IDLE) && (phase != PH_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fixed_cnt   <= '0;
      wait_cycles <= '0;
    end else begin
      if (start && !busy) begin
        fixed_cnt   <= '0;
        wait_cycles <= '0;
      end else begin
        if (hamming_done) fixed_cnt <= fixed_cnt + 32'(corrected_cnt);
        if (rx_wait)      wait_cycles <= wait_cycles + 1'b1;
      end
    end
  end

endmodule
