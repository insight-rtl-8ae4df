// phase_gen: period and phase generator for the bit-serial datapath.
//
// A free-running counter steps through the 2n cycles of one period and
// broadcasts them as a bs_timing_t bundle: phi0 is high for the first n cycles
// (words move between neurons and delay elements shift), phi1 for the other n
// (multipliers complete their 2n-bit products). Every synapse, adder and delay
// element in the system starts its work on the same cycle, as in the paper's
// timing diagram; the counter encoding and the reset to cycle 0 are this
// design's choice.
//
// Interface: clk, rst_n (synchronous, active low), tm (registered outputs).
// Timing: after reset release the first cycle has cnt = 0 and first = 1.
module phase_gen
  import insight_pkg::*;
#(
  parameter int unsigned N = 16   // word length n; the period is 2n cycles
) (
  input  logic       clk,
  input  logic       rst_n,
  output bs_timing_t tm
);

  localparam int unsigned PERIOD = 2 * N;

  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n)                        cnt <= '0;
    else if (cnt == CNT_W'(PERIOD - 1)) cnt <= '0;
    else                               cnt <= cnt + 1'b1;
  end

  always_comb begin
    tm.cnt   = cnt;
    tm.phi0  = (cnt < CNT_W'(N));
    tm.first = (cnt == '0);
    tm.last  = (cnt == CNT_W'(PERIOD - 1));
  end

  initial assert (PERIOD < (1 << CNT_W)) else $error("phase_gen: N too large for CNT_W");

  cnt_in_range: assert property (@(posedge clk) disable iff (!rst_n) cnt < CNT_W'(PERIOD));

endmodule
