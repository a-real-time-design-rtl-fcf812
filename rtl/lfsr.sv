// lfsr: Fibonacci linear feedback shift register for pseudo random positions.
//
// The state shifts one place left each clock that step is high; the new low
// bit is the XOR of the tapped state bits (maximal-length taps from
// qkd_er_pkg::lfsr_taps), so a nonzero seed runs through all 2^WIDTH-1
// nonzero values before repeating. With WIDTH = log2(key length) every state
// is a bit position of the key string, as the paper requires (its seed width
// equals the width of the key length). load copies seed into the state and
// has priority over step; state is the value to use in the current cycle.
// A zero seed would lock the register, so it is replaced by 1.
// The paper gives the LFSR principle; taps and shift direction are this
// design's choice.
module lfsr
  import qkd_er_pkg::*;
#(
  parameter int unsigned WIDTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic             step,
  output logic [WIDTH-1:0] state
);
  localparam logic [19:0] TAPS = lfsr_taps(WIDTH);

  logic fb;

  always_comb begin
    fb = 1'b0;
    for (int k = 0; k < 4; k++) begin
      if (TAPS[5*k +: 5] != 0) fb = fb ^ state[TAPS[5*k +: 5] - 1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= WIDTH'(1);
    else if (load)  state <= (seed == '0) ? WIDTH'(1) : seed;
    else if (step)  state <= {state[WIDTH-2:0], fb};
  end

endmodule
