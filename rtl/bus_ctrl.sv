// bus_ctrl: control module and data bus of the interface module.
//
// The parity comparison module, the Hamming code module and the pass
// controller all exchange words with the other side through one outgoing and
// one incoming FIFO. Each raises req while it needs the bus; the control
// module grants the bus to one requester at a time, lowest index first, and
// keeps the grant until that requester drops req (no preemption). Only the
// granted requester is the data source of the bus: its tx word is pushed to
// the outgoing FIFO when tx_valid is high and the FIFO is not full
// (tx_ready), and its rx_ready pops the incoming FIFO when a word is there
// (rx_valid). The incoming word is broadcast on rx_data.
//
// A granted requester that wants a word while the incoming FIFO is empty is
// waiting for the other side (network latency); rx_wait reports it.
// Timing: a grant appears one clock after req rises. Bus requests, a shared
// bus and a control module that picks the single data source follow the
// paper's figure of the interface; the fixed priority and grant holding are
// this design's choice.
module bus_ctrl #(
  parameter int unsigned NREQ  = 3,
  parameter int unsigned WIDTH = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // requesters
  input  logic [NREQ-1:0]        req,
  output logic [NREQ-1:0]        grant,
  input  logic [NREQ-1:0]        tx_valid,
  input  logic [WIDTH-1:0]       tx_data [NREQ],
  output logic [NREQ-1:0]        tx_ready,
  output logic [NREQ-1:0]        rx_valid,
  input  logic [NREQ-1:0]        rx_ready,
  output logic [WIDTH-1:0]       rx_data,
  // FIFOs
  output logic                   out_push,
  output logic [WIDTH-1:0]       out_din,
  input  logic                   out_full,
  output logic                   in_pop,
  input  logic [WIDTH-1:0]       in_dout,
  input  logic                   in_empty,
  output logic                   rx_wait
);
  logic [NREQ-1:0] grant_q, grant_d;

  always_comb begin
    grant_d = grant_q;
    if ((grant_q & req) == '0) begin
      grant_d = '0;
      for (int i = NREQ-1; i >= 0; i--)
        if (req[i]) grant_d = NREQ'(1) << i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grant_q <= '0;
    else        grant_q <= grant_d;
  end

  assign grant = grant_q;

  always_comb begin
    out_push = 1'b0;
    out_din  = '0;
    in_pop   = 1'b0;
    rx_wait  = 1'b0;
    for (int i = 0; i < NREQ; i++) begin
      tx_ready[i] = grant_q[i] & req[i] & ~out_full;
      rx_valid[i] = grant_q[i] & req[i] & ~in_empty;
      if (grant_q[i] & req[i]) begin
        out_push = tx_valid[i] & ~out_full;
        out_din  = tx_data[i];
        in_pop   = rx_ready[i] & ~in_empty;
        rx_wait  = rx_ready[i] & in_empty;
      end
    end
  end

  assign rx_data = in_dout;

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant_q));

endmodule
