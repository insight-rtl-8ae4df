// sram_shift_reg: a long delay chain held in a 1-bit-wide RAM.
//
// Behaves like DEPTH delay elements in series (DEPTH*n bits, shifting only in
// phi0) but stores the bits in a memory addressed by a circular pointer
// instead of in flip-flops: each phi0 cycle it reads the bit written
// DEPTH*n shifts ago and writes the new bit in its place. The read is
// asynchronous, as in the LUT-RAM shift registers of an FPGA, so the output
// is available in the same cycle as with the flip-flop chain. The original
// FPGA build maps long delay chains onto such SRAM-based shift registers;
// the circular-buffer form is this design's way of writing one portably.
// The memory is not touched by rst_n; it starts as all zeros (an initial
// value, as an FPGA's configuration gives), so after power-up the chain
// delivers zeros like the reset flip-flop chain.
module sram_shift_reg
  import insight_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 28   // in n-bit words (delay elements)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bs_timing_t tm,
  input  logic       d_in,
  output logic       d_out
);

  localparam int unsigned LEN = DEPTH * N;
  localparam int unsigned PW  = idx_w(LEN);

  logic          mem [LEN];
  logic [PW-1:0] ptr;

  initial begin
    for (int i = 0; i < int'(LEN); i++) mem[i] = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (tm.phi0) mem[ptr] <= d_in;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)       ptr <= '0;
    else if (tm.phi0) ptr <= (ptr == PW'(LEN - 1)) ? '0 : ptr + 1'b1;
  end

  assign d_out = mem[ptr];

endmodule
