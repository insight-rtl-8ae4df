// delay_element: holds one n-bit word for one period.
//
// A 1-bit, n-stage shift register that shifts only during phi0. While the
// word of period P streams in (LSB first), the word of period P-1 streams out
// of the other end in the same cycles, so the output in phi0 is the input
// delayed by exactly one sample. In phi1 the register holds. This is the
// paper's delay element; the reset to zero is this design's choice.
module delay_element
  import insight_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bs_timing_t tm,
  input  logic       d_in,
  output logic       d_out
);

  logic [N-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n)       sr <= '0;
    else if (tm.phi0) sr <= {d_in, sr[N-1:1]};
  end

  assign d_out = sr[0];

endmodule
