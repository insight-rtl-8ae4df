// delay_line: a chain of delay elements with evenly spaced taps.
//
// TAPS*SPACING delay elements in series; taps[j] is the output after
// (j+1)*SPACING elements, i.e. the input sequence delayed by (j+1)*SPACING
// samples. With SPACING = W (the image width) the taps give the pixels above
// the current one, as a vertical filter needs; with SPACING = 1 they give the
// pixels to the left, as a horizontal filter needs.
//
// With USE_RAM = 0 the chain is built from flip-flop delay elements. With
// USE_RAM = 1 each stretch of SPACING elements between two taps is one
// sram_shift_reg, a RAM-based equivalent, as the original design refines its
// delay elements into SRAM-based shift registers; the delay is identical.
module delay_line
  import insight_pkg::*;
#(
  parameter int unsigned N       = 16,
  parameter int unsigned TAPS    = 27,
  parameter int unsigned SPACING = 28,
  parameter bit          USE_RAM = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  bs_timing_t      tm,
  input  logic            d_in,
  output logic [TAPS-1:0] taps
);

  localparam int unsigned LEN = TAPS * SPACING;

  if (USE_RAM) begin : g_ram
    logic [TAPS:0] seg;
    assign seg[0] = d_in;
    for (genvar j = 0; j < TAPS; j++) begin : g_seg
      sram_shift_reg #(.N(N), .DEPTH(SPACING)) u_sr (
        .clk, .rst_n, .tm, .d_in(seg[j]), .d_out(seg[j+1]));
      assign taps[j] = seg[j+1];
    end
  end else begin : g_ff
    logic [LEN:0] node;
    assign node[0] = d_in;
    for (genvar e = 0; e < LEN; e++) begin : g_el
      delay_element #(.N(N)) u_de (.clk, .rst_n, .tm, .d_in(node[e]), .d_out(node[e+1]));
    end
    for (genvar j = 0; j < TAPS; j++) begin : g_tap
      assign taps[j] = node[(j + 1) * SPACING];
    end
  end

endmodule
