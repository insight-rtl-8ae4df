// bias_circuit: adds a neuron's bias to its bit-serial weighted sum.
//
// The weighted sum leaves the k-input adder as a 2n-bit stream with 2m
// fractional bits; the bias is stored as an n-bit word with m fractional bits.
// The circuit therefore feeds the bias shifted left by m: zeros in cycles
// 0..m-1, bias bits 0..n-1 in cycles m..m+n-1, and its sign bit after that.
// A two-input serial adder (one carry flop, cleared each period) adds the two
// streams with zero latency. The paper only names a bias circuit between the
// adder and the activation; the alignment and adder are this design's.
//
// The bias register sits on the weight scan chain (wload/w_si/w_so), loaded
// like a synapse weight.
module bias_circuit
  import insight_pkg::*;
#(
  parameter int unsigned N = 16,
  parameter int unsigned M = 7
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bs_timing_t tm,
  input  logic       a_bit,
  output logic       s_bit,
  input  logic       wload,
  input  logic       w_si,
  output logic       w_so
);

  logic [N-1:0] b;
  logic         carry, c_in, b_bit;
  logic [1:0]   total;
  logic [$clog2(N)-1:0] bidx;  // bias bit sent in this cycle

  always_comb begin
    bidx = $clog2(N)'(tm.cnt - CNT_W'(M));
    if (tm.cnt < CNT_W'(M))          b_bit = 1'b0;
    else if (tm.cnt < CNT_W'(M + N)) b_bit = b[bidx];
    else                             b_bit = b[N-1];
    c_in  = tm.first ? 1'b0 : carry;
    total = 2'(a_bit) + 2'(b_bit) + 2'(c_in);
    s_bit = total[0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      carry <= 1'b0;
      b     <= '0;
    end else begin
      carry <= total[1];
      if (wload) b <= {w_si, b[N-1:1]};
    end
  end

  assign w_so = b[0];

endmodule
