// neuron: k synapses, a k-input bit-serial adder, optional bias and ReLU, and
// the pad registers that realign the result.
//
// All K inputs carry n-bit words (m fractional bits) in phi0 of period P. The
// synapses' 2n-bit products are summed with zero latency, the bias (if
// HAS_BIAS) is added, and the 2n-m pad delay (pipe_regs) places sum bits
// m..m+n-1 in phi0 of period P+1: the output is the truncated n-bit word with
// m fractional bits, one period after the input. With RELU set, a negative
// result leaves as zero. Outside phi0 the output is held at 0. This is the
// paper's neuron (Fig. 4a) with the bias and activation it leaves out of the
// figure; truncation is plain floor with wrap-around on overflow.
//
// Scan chain order: w_si -> synapse 0 -> ... -> synapse K-1 -> bias -> w_so.
module neuron
  import insight_pkg::*;
#(
  parameter int unsigned K        = 4,
  parameter int unsigned N        = 16,
  parameter int unsigned M        = 7,
  parameter bit          HAS_BIAS = 1'b0,
  parameter bit          RELU     = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  bs_timing_t   tm,
  input  logic [K-1:0] x_bits,
  output logic         y_bit,
  input  logic         wload,
  input  logic         w_si,
  output logic         w_so
);

  logic [K-1:0] p_bits;
  logic [K:0]   chain;
  logic         sum_bit, pre_bit, pad_bit, act_bit;

  assign chain[0] = w_si;

  for (genvar i = 0; i < K; i++) begin : g_syn
    synapse #(.N(N)) u_syn (
      .clk, .rst_n, .tm,
      .x_bit(x_bits[i]), .p_bit(p_bits[i]),
      .wload, .w_si(chain[i]), .w_so(chain[i+1])
    );
  end

  kin_adder #(.K(K)) u_add (.clk, .rst_n, .tm, .in_bits(p_bits), .s_bit(sum_bit));

  if (HAS_BIAS) begin : g_bias
    bias_circuit #(.N(N), .M(M)) u_bias (
      .clk, .rst_n, .tm, .a_bit(sum_bit), .s_bit(pre_bit),
      .wload, .w_si(chain[K]), .w_so
    );
  end else begin : g_nobias
    assign pre_bit = sum_bit;
    assign w_so    = chain[K];
  end

  pipe_regs #(.D(2 * N - M)) u_pad (.clk, .rst_n, .d_in(pre_bit), .d_out(pad_bit));

  if (RELU) begin : g_relu
    relu_act #(.N(N), .M(M)) u_act (
      .clk, .rst_n, .tm, .d_in(pre_bit), .d_out(pad_bit), .y_bit(act_bit)
    );
  end else begin : g_lin
    assign act_bit = pad_bit;
  end

  assign y_bit = act_bit & tm.phi0;

endmodule
