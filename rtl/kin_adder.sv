// kin_adder: k-input bit-serial adder with zero latency.
//
// Adds K streams that each carry a 2n-bit two's-complement number LSB first.
// Each cycle the K input bits are counted and added to the carry kept from the
// previous cycle; the LSB of that total is the sum bit of this cycle and the
// rest becomes the new carry. The carry is ignored on the first cycle of a
// period, so one 2n-bit sum is formed per period (modulo 2^2n, like any
// fixed-width adder). The paper specifies a zero-latency k-input adder; the
// popcount-plus-carry structure is this design's.
//
// Interface: in_bits[K] in, s_bit out in the same cycle. Timing from tm.
module kin_adder
  import insight_pkg::*;
#(
  parameter int unsigned K = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  bs_timing_t   tm,
  input  logic [K-1:0] in_bits,
  output logic         s_bit
);

  localparam int unsigned CW = $clog2(K) + 2;  // holds K + carry (carry < K)

  logic [CW-1:0] carry, total;

  always_comb begin
    total = tm.first ? '0 : carry;
    for (int i = 0; i < K; i++) total = total + CW'(in_bits[i]);
    s_bit = total[0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) carry <= '0;
    else        carry <= total >> 1;
  end

endmodule
