// insight_top: a single-layer neuromorphic system built from bit-serial
// neurons and delay elements.
//
// The image sits in the frame buffer and is sent, pixel by pixel in raster
// order, into one factorized layer executed as a time-delay network
// (tdnn_layer). A single phase generator times everything: one pixel enters
// per 2n-cycle period, and each of the five sublayers adds one period of
// latency. At the output, the F bit-serial streams are collected into n-bit
// words; out_valid pulses for one cycle when the words belong to a position
// whose KH x KW window lies inside the image, with (out_x, out_y) the window's
// bottom-right pixel. With the default parameters (a 28 x 28 single-channel
// image, KH = KW = 28, F = 10) the layer is the fully-connected 784 -> 10
// softmax-regression layer, and exactly one output position is valid per
// frame, after 784 + 5 periods.
//
// Weights and biases are loaded through one scan chain (wload, w_si, w_so) of
// WBITS bits; each n-bit word is shifted in LSB first, the word for the last
// register of the chain first. Chain order: channel, vertical, horizontal,
// code and inverse-transform sublayers; inside a sublayer neuron by neuron,
// each neuron's synapses in input order and then its bias.
//
// Outside this module sit the host link that fills the frame buffer (the
// paper uses a UART) and whatever displays or classifies the outputs.
module insight_top
  import insight_pkg::*;
#(
  parameter int unsigned C    = 1,
  parameter int unsigned H    = 28,
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
  input  logic                  clk,
  input  logic                  rst_n,
  // frame buffer write port (host link)
  input  logic                  wr_en,
  input  logic [idx_w(C)-1:0]   wr_ch,
  input  logic [idx_w(H*W)-1:0] wr_addr,
  input  logic [N-1:0]          wr_data,
  input  logic                  start,
  // weight / bias scan chain
  input  logic                  wload,
  input  logic                  w_si,
  output logic                  w_so,
  // results
  output logic                  out_valid,
  output logic [idx_w(W)-1:0]   out_x,
  output logic [idx_w(H)-1:0]   out_y,
  output logic [N-1:0]          out_data [F],
  output logic                  busy
);

  localparam int unsigned LAT = 5;  // sublayers, one period each
  localparam int unsigned XW  = idx_w(W);
  localparam int unsigned YW  = idx_w(H);

  typedef struct packed {
    logic          valid;
    logic [XW-1:0] x;
    logic [YW-1:0] y;
  } pos_t;

  bs_timing_t   tm;
  logic [C-1:0] s_bits;
  logic         s_valid, fb_busy;
  logic [XW-1:0] s_x;
  logic [YW-1:0] s_y;
  logic [F-1:0] y_bits;
  logic [N-1:0] cap [F];
  pos_t         pos [LAT];
  logic         in_flight;

  phase_gen #(.N(N)) u_phase (.clk, .rst_n, .tm);

  frame_buffer #(.C(C), .H(H), .W(W), .N(N)) u_fb (
    .clk, .rst_n, .tm, .wr_en, .wr_ch, .wr_addr, .wr_data, .start,
    .s_bits, .s_valid, .s_x, .s_y, .busy(fb_busy)
  );

  tdnn_layer #(.C(C), .W(W), .KH(KH), .KW(KW), .RC(RC), .RV(RV), .RF(RF), .F(F),
               .N(N), .M(M), .RELU(RELU)) u_layer (
    .clk, .rst_n, .tm, .x_bits(s_bits), .y_bits, .wload, .w_si, .w_so
  );

  // Position of each in-flight sample, advanced once per period:
  // pos[k].valid says that sublayer k+1 is working on a real pixel in the
  // current period (the per-sublayer "valid" flags of the timing diagram).
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pos[i] <= '0;
    end else if (tm.last) begin
      pos[0] <= '{valid: s_valid, x: s_x, y: s_y};
      for (int i = 1; i < LAT; i++) pos[i] <= pos[i-1];
    end
  end

  // Deserialize the output streams; a word is complete at the end of phi0.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int f = 0; f < F; f++) begin
        cap[f]      <= '0;
        out_data[f] <= '0;
      end
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (tm.phi0) begin
        for (int f = 0; f < F; f++) cap[f] <= {y_bits[f], cap[f][N-1:1]};
      end
      if (tm.last && pos[LAT-1].valid &&
          pos[LAT-1].x >= XW'(KW - 1) && pos[LAT-1].y >= YW'(KH - 1)) begin
        out_valid <= 1'b1;
        out_x     <= pos[LAT-1].x;
        out_y     <= pos[LAT-1].y;
        for (int f = 0; f < F; f++) out_data[f] <= cap[f];
      end
    end
  end

  always_comb begin
    in_flight = 1'b0;
    for (int i = 0; i < LAT; i++) in_flight = in_flight | pos[i].valid;
  end

  assign busy = fb_busy | in_flight;

endmodule
