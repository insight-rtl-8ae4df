// relu_act: rectified-linear activation for a bit-serial neuron output.
//
// In LSB-first arithmetic the sign of a word comes last, so the activation
// must know it before the word leaves. The truncated result's sign is sum bit
// m+n-1, which enters the pad registers (d_in) at cycle m+n-1 of the period,
// while the word itself leaves them (d_out) in cycles 0..n-1 of the next
// period. The sign is latched at cycle m+n-1 and, if it is 1, the outgoing
// word is forced to zero. Requires 1 <= m <= n. The paper names ReLU as an
// activation; this sign-lookahead use of the pad delay is this design's.
module relu_act
  import insight_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned M = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bs_timing_t tm,
  input  logic       d_in,   // stream entering the pad registers
  input  logic       d_out,  // stream leaving the pad registers
  output logic       y_bit
);

  logic neg;

  always_ff @(posedge clk) begin
    if (!rst_n)                          neg <= 1'b0;
    else if (tm.cnt == CNT_W'(M + N - 1)) neg <= d_in;
  end

  assign y_bit = d_out & ~neg;

  initial assert (M >= 1 && M <= N) else $error("relu_act: need 1 <= M <= N");

endmodule
