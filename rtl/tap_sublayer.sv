// tap_sublayer: the vertical or horizontal filter sublayer in TDNN form.
//
// The image reaches this sublayer as a raster sequence, one sample per period.
// For each of the CIN input channels a delay line provides the current sample
// and KSIZE-1 earlier ones, spaced SPACING samples apart: SPACING = W gives a
// column of KSIZE pixels (vertical filter, W(KSIZE-1) delay elements per
// channel), SPACING = 1 gives a row of KSIZE pixels (horizontal filter,
// KSIZE-1 delay elements per channel). COUT neurons each take all
// CIN*KSIZE of these, so the sublayer computes a 1-D convolution along one
// image axis. Kernel tap k of channel c, neuron input c*KSIZE+k, sees the
// sample delayed by (KSIZE-1-k)*SPACING, so tap 0 is the top (left) pixel of
// the window and the output at sample t belongs to the window that ends at t.
// Output words appear one period after the inputs.
//
// Every output channel sees every input channel, as in the paper's weight
// tensors for these sublayers. Scan chain order: neuron 0 .. COUT-1, each
// with synapses in input order c*KSIZE+k.
module tap_sublayer
  import insight_pkg::*;
#(
  parameter int unsigned CIN     = 2,
  parameter int unsigned COUT    = 2,
  parameter int unsigned KSIZE   = 3,
  parameter int unsigned SPACING = 3,
  parameter int unsigned N       = 16,
  parameter int unsigned M       = 7,
  parameter bit          USE_RAM = 1'b0   // delay lines in RAM instead of flip-flops
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

  localparam int unsigned K = CIN * KSIZE;

  // win[c*KSIZE + k]: kernel tap k of channel c
  logic [K-1:0]  win;
  logic [COUT:0] chain;

  for (genvar c = 0; c < CIN; c++) begin : g_ch
    if (KSIZE > 1) begin : g_dl
      logic [KSIZE-2:0] taps;
      delay_line #(.N(N), .TAPS(KSIZE - 1), .SPACING(SPACING), .USE_RAM(USE_RAM)) u_dl (
        .clk, .rst_n, .tm, .d_in(x_bits[c]), .taps
      );
      for (genvar k = 0; k < KSIZE - 1; k++) begin : g_k
        assign win[c*KSIZE + k] = taps[KSIZE-2-k];
      end
    end
    assign win[c*KSIZE + KSIZE - 1] = x_bits[c];
  end

  assign chain[0] = w_si;

  for (genvar o = 0; o < COUT; o++) begin : g_neu
    neuron #(.K(K), .N(N), .M(M)) u_neu (
      .clk, .rst_n, .tm, .x_bits(win), .y_bit(y_bits[o]),
      .wload, .w_si(chain[o]), .w_so(chain[o+1])
    );
  end

  assign w_so = chain[COUT];

endmodule
