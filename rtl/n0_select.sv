// n0_select: initial block length of the reconciliation from the error rate.
//
// The paper chooses n0 as the largest power of two with n0*p <= 0.8, but
// never below 8 (so p = 0.01, 0.05, 0.10, 0.15 give 64, 16, 8, 8). The
// error rate arrives as p_q16 = floor(p * 2^16); the test n0*p <= 0.8 becomes
// (n0 * p_q16) <= 52428. The result is log2(n0), combinational. As this
// design's own choice, n0 is also capped at half the key length (a lower
// error rate, including p = 0, gives n0 = KEY_BITS/2).
module n0_select
  import qkd_er_pkg::*;
#(
  parameter int unsigned KEY_BITS = 65536
) (
  input  logic [15:0] p_q16,
  output logic [4:0]  lg_n0
);
  localparam int unsigned LG_MAX = $clog2(KEY_BITS) - 1;

  always_comb begin
    lg_n0 = 5'(MIN_LG_N);
    for (int unsigned k = MIN_LG_N; k <= LG_MAX; k++) begin
      if ((48'(p_q16) << k) <= 48'(N0P_LIMIT_Q16)) lg_n0 = 5'(k);
    end
  end

endmodule
