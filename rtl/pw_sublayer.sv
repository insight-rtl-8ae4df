// pw_sublayer: a pointwise (1x1) sublayer of the factorized network.
//
// COUT neurons, each connected to all CIN input channels at the same image
// position. The paper's channel filter, code generation and inverse transform
// sublayers all have this shape (weights C x1x1x Rc, Rv x1x1x Rf,
// Rf x1x1x F). Output words appear one period after the inputs.
//
// Scan chain order: neuron 0 first (its synapses for input channel 0..CIN-1,
// then its bias), up to neuron COUT-1 last.
module pw_sublayer
  import insight_pkg::*;
#(
  parameter int unsigned CIN      = 2,
  parameter int unsigned COUT     = 3,
  parameter int unsigned N        = 16,
  parameter int unsigned M        = 7,
  parameter bit          HAS_BIAS = 1'b0,
  parameter bit          RELU     = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  bs_timing_t      tm,
  input  logic [CIN-1:0]  x_bits,
  output logic [COUT-1:0] y_bits,
  input  logic            wload,
  input  logic            w_si,
  output logic            w_so
);

  logic [COUT:0] chain;

  assign chain[0] = w_si;

  for (genvar o = 0; o < COUT; o++) begin : g_neu
    neuron #(.K(CIN), .N(N), .M(M), .HAS_BIAS(HAS_BIAS), .RELU(RELU)) u_neu (
      .clk, .rst_n, .tm, .x_bits, .y_bit(y_bits[o]),
      .wload, .w_si(chain[o]), .w_so(chain[o+1])
    );
  end

  assign w_so = chain[COUT];

endmodule
