// pipe_regs: the 2n-m cycle pad delay at a neuron's output.
//
// A neuron's sum leaves the adder as a 2n-bit stream with 2m fractional bits,
// starting at cycle 0 of the period in which its inputs arrived. The n-bit
// result with m fractional bits is bits m..m+n-1 of that sum. Delaying the
// stream by D = 2n-m cycles makes bit m leave exactly at cycle 0 of the next
// period, so the truncated word appears in that period's phi0 where the next
// sublayer reads it; the low m bits fall in the previous phi1 and are ignored.
// This follows the paper (a 2n-m cycle pad, usable as retimable pipeline
// registers); here it is a plain D-stage shift register, always clocked.
module pipe_regs #(
  parameter int unsigned D = 25
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d_in,
  output logic d_out
);

  logic [D-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n) sr <= '0;
    else        sr <= {sr[D-2:0], d_in};
  end

  assign d_out = sr[D-1];

  initial assert (D >= 2) else $error("pipe_regs: D must be at least 2");

endmodule
