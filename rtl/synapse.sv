// synapse: one weight and a bit-serial multiplier.
//
// The weight is an n-bit two's-complement register. The input arrives one bit
// per cycle, LSB first, during phi0; during phi1 the synapse repeats the sign
// bit it latched on the last phi0 cycle, so the multiplier sees the input
// sign-extended to 2n bits. Each cycle the shift-add multiplier adds the
// weight (when the input bit is 1) to its partial-product register "pp",
// sends the LSB of the sum out and keeps the sum shifted right arithmetically.
// Over one period the output therefore carries the full 2n-bit product, LSB
// first, with zero latency: output bit t leaves in cycle t. pp is cleared at
// the first cycle of each period, so a new product starts every 2n cycles.
// This is the paper's structure (weight register, partial-product register,
// adder); the (n+2)-bit pp width and the sign-repeat in phi1 are this
// design's.
//
// The weight is loaded through a 1-bit scan chain (wload shifts w_si into the
// MSB, the LSB leaves on w_so); the chain is this design's own way of making
// weights programmable, where the paper's compiler fixes them in the netlist.
module synapse
  import insight_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bs_timing_t tm,
  input  logic       x_bit,   // bit-serial input, LSB first, read in phi0
  output logic       p_bit,   // bit-serial 2n-bit product, LSB first
  input  logic       wload,
  input  logic       w_si,
  output logic       w_so
);

  logic [N-1:0]        w;
  logic signed [N+1:0] pp, sum, addend;
  logic                x_sign;
  logic                xb;

  always_comb begin
    xb     = tm.phi0 ? x_bit : x_sign;
    addend = xb ? (N+2)'(signed'(w)) : '0;
    sum    = (tm.first ? '0 : pp) + addend;
    p_bit  = sum[0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pp     <= '0;
      x_sign <= 1'b0;
      w      <= '0;
    end else begin
      pp <= sum >>> 1;
      if (tm.cnt == CNT_W'(N - 1)) x_sign <= x_bit;
      if (wload) w <= {w_si, w[N-1:1]};
    end
  end

  assign w_so = w[0];

endmodule
