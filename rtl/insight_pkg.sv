// insight_pkg: shared types for the bit-serial neuromorphic datapath.
//
// Every arithmetic block in the design works on two's-complement numbers sent
// one bit per clock, least significant bit first. Time is divided into periods
// of 2n cycles: in the first half (phase phi0) an n-bit word travels on a wire,
// in the second half (phi1) the multipliers finish the 2n-bit products.
// bs_timing_t is the bundle that the phase generator broadcasts to every
// block so they all start a period on the same clock edge.
package insight_pkg;

  // Width of the cycle counter inside a period; supports n up to 127.
  localparam int unsigned CNT_W = 8;

  typedef struct packed {
    logic [CNT_W-1:0] cnt;   // cycle index inside the period, 0 .. 2n-1
    logic             phi0;  // first half of the period (cnt < n)
    logic             first; // cnt == 0
    logic             last;  // cnt == 2n-1
  } bs_timing_t;

  // Bit width of an index that ranges over 0 .. v-1 (at least 1 bit).
  function automatic int unsigned idx_w(int unsigned v);
    return (v > 1) ? $clog2(v) : 1;
  endfunction

endpackage
