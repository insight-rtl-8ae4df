// tb_sram_shift_reg: the RAM-based chain must deliver, in phi0 of period p,
// the word sent in period p - DEPTH (zero before that), with random junk on
// the input in phi1; it is run side by side with the same length of
// flip-flop delay elements, whose output must be identical in every cycle.
module tb_sram_shift_reg;
  import insight_pkg::*;
  localparam int unsigned N = 8, DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic d_in = 1'b0, d_out;
  logic [0:0] ff_taps;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  sram_shift_reg #(.N(N), .DEPTH(DEPTH)) dut (.clk, .rst_n, .tm, .d_in, .d_out);
  delay_line #(.N(N), .TAPS(1), .SPACING(DEPTH), .USE_RAM(1'b0)) u_ff (
    .clk, .rst_n, .tm, .d_in, .taps(ff_taps));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] seq [50];
    logic [N-1:0] got, expv;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!tm.first) @(negedge clk);
    for (int p = 0; p < 50; p++) begin
      seq[p] = N'($urandom);
      for (int c = 0; c < 2 * int'(N); c++) begin
        d_in = (c < int'(N)) ? seq[p][c] : 1'($urandom);
        #1;
        if (c < int'(N)) got[c] = d_out;
        checks++;
        if (d_out !== ff_taps[0]) begin
          failures++;
          $display("FAIL p=%0d c=%0d differs from flip-flop chain", p, c);
        end
        @(negedge clk);
      end
      expv = (p >= int'(DEPTH)) ? seq[p - DEPTH] : '0;
      checks++;
      if (got !== expv) begin
        failures++;
        $display("FAIL p=%0d got %h exp %h", p, got, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
