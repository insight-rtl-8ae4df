// tdnn_layer: one factorized network layer executed as a time-delay network.
//
// A convolutional or fully-connected layer with weights C x KH x KW x F is
// replaced by five sublayers, each a ring of neurons one period deep:
//   channel filter     C  -> RC  pointwise
//   vertical filter    RC -> RV  KH taps spaced W samples apart
//   horizontal filter  RV -> RV  KW taps spaced 1 sample apart
//   code generation    RV -> RF  pointwise
//   inverse transform  RF -> F   pointwise, with bias and optional ReLU
// The input image enters as C raster sequences s_z(t), t = yW + x, one sample
// per 2n-cycle period. The output for sample t leaves 5 periods later and is
// meaningful where the KH x KW window ending at (y, x) lies inside the image:
// y >= KH-1 and x >= KW-1 (for a fully-connected layer, KH = H and KW = W,
// only the last sample). The number of delay elements is
// W(KH-1)RC + (KW-1)RV, as the paper gives. The five-sublayer structure is
// the paper's; putting bias and activation only on the last sublayer is this
// design's choice. The vertical filter's long delay lines (W(KH-1) elements
// per channel) are RAM-based shift registers, the horizontal filter's short
// ones are flip-flop delay elements.
//
// Scan chain order: channel, vertical, horizontal, code, inverse sublayer.
module tdnn_layer
  import insight_pkg::*;
#(
  parameter int unsigned C    = 1,
  parameter int unsigned W    = 28,
  parameter int unsigned KH   = 28,
  parameter int unsigned KW   = 28,
  parameter int unsigned RC   = 4,
  parameter int unsigned RV   = 6,
  parameter int unsigned RF   = 6,
  parameter int unsigned F    = 10,
  parameter int unsigned N    = 16,
  parameter int unsigned M    = 7,
  parameter bit          RELU = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  bs_timing_t   tm,
  input  logic [C-1:0] x_bits,
  output logic [F-1:0] y_bits,
  input  logic         wload,
  input  logic         w_si,
  output logic         w_so
);

  logic [RC-1:0] c_bits;
  logic [RV-1:0] v_bits, h_bits;
  logic [RF-1:0] g_bits;
  logic [4:0]    so;

  pw_sublayer #(.CIN(C), .COUT(RC), .N(N), .M(M)) u_chan (
    .clk, .rst_n, .tm, .x_bits(x_bits), .y_bits(c_bits), .wload, .w_si(w_si), .w_so(so[0])
  );

  tap_sublayer #(.CIN(RC), .COUT(RV), .KSIZE(KH), .SPACING(W), .N(N), .M(M),
                 .USE_RAM(1'b1)) u_vert (
    .clk, .rst_n, .tm, .x_bits(c_bits), .y_bits(v_bits), .wload, .w_si(so[0]), .w_so(so[1])
  );

  tap_sublayer #(.CIN(RV), .COUT(RV), .KSIZE(KW), .SPACING(1), .N(N), .M(M)) u_horz (
    .clk, .rst_n, .tm, .x_bits(v_bits), .y_bits(h_bits), .wload, .w_si(so[1]), .w_so(so[2])
  );

  pw_sublayer #(.CIN(RV), .COUT(RF), .N(N), .M(M)) u_code (
    .clk, .rst_n, .tm, .x_bits(h_bits), .y_bits(g_bits), .wload, .w_si(so[2]), .w_so(so[3])
  );

  pw_sublayer #(.CIN(RF), .COUT(F), .N(N), .M(M), .HAS_BIAS(1'b1), .RELU(RELU)) u_inv (
    .clk, .rst_n, .tm, .x_bits(g_bits), .y_bits(y_bits), .wload, .w_si(so[3]), .w_so(so[4])
  );

  assign w_so = so[4];

endmodule
