// recon_interface: interface module of a reconciliation module.
//
// It receives and sends every word exchanged with the other side during
// reconciliation using just two FIFOs, one incoming and one outgoing, and a
// data bus whose single data source at any time is chosen by the control
// module (bus_ctrl). Channel side: a valid/ready stream in (rx_*) that fills
// the incoming FIFO and a valid/ready stream out (tx_*) that drains the
// outgoing FIFO; a word moves when valid and ready are both high at a clock
// edge. Module side: per-requester bus signals as described in bus_ctrl.
// The two-FIFO structure follows the paper; FIFO depth and the stream
// handshake are this design's choice.
module recon_interface #(
  parameter int unsigned NREQ       = 3,
  parameter int unsigned WIDTH      = 64,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  // channel
  input  logic               ch_rx_valid,
  input  logic [WIDTH-1:0]   ch_rx_data,
  output logic               ch_rx_ready,
  output logic               ch_tx_valid,
  output logic [WIDTH-1:0]   ch_tx_data,
  input  logic               ch_tx_ready,
  // modules on the data bus
  input  logic [NREQ-1:0]    req,
  output logic [NREQ-1:0]    grant,
  input  logic [NREQ-1:0]    tx_valid,
  input  logic [WIDTH-1:0]   tx_data [NREQ],
  output logic [NREQ-1:0]    tx_ready,
  output logic [NREQ-1:0]    rx_valid,
  input  logic [NREQ-1:0]    rx_ready,
  output logic [WIDTH-1:0]   rx_data,
  output logic               rx_wait
);
  logic             in_full, in_empty, in_pop;
  logic [WIDTH-1:0] in_dout;
  logic             out_full, out_empty, out_push;
  logic [WIDTH-1:0] out_din;

  assign ch_rx_ready = ~in_full;
  assign ch_tx_valid = ~out_empty;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .push(ch_rx_valid & ~in_full), .din(ch_rx_data),
    .pop(in_pop), .dout(in_dout),
    .full(in_full), .empty(in_empty), .count()
  );

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .push(out_push), .din(out_din),
    .pop(ch_tx_ready & ~out_empty), .dout(ch_tx_data),
    .full(out_full), .empty(out_empty), .count()
  );

  bus_ctrl #(.NREQ(NREQ), .WIDTH(WIDTH)) u_bus (
    .clk, .rst_n,
    .req, .grant, .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_ready, .rx_data,
    .out_push, .out_din, .out_full,
    .in_pop, .in_dout, .in_empty,
    .rx_wait
  );

endmodule
