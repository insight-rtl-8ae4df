// tb_delay_line: tap j must show the word sent (j+1)*SPACING periods
// earlier (zero before that), for a random word sequence.
module tb_delay_line;
  import insight_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned TAPS = 3;
  localparam int unsigned SPACING = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic d_in = 1'b0;
  logic [TAPS-1:0] taps;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  delay_line #(.N(N), .TAPS(TAPS), .SPACING(SPACING)) dut (.clk, .rst_n, .tm, .d_in, .taps);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] seq [60];
    logic [N-1:0] got [TAPS];
    logic [N-1:0] expv;
    int d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!tm.first) @(negedge clk);
    for (int p = 0; p < 60; p++) begin
      seq[p] = N'($urandom);
      for (int c = 0; c < 2 * int'(N); c++) begin
        d_in = (c < int'(N)) ? seq[p][c] : 1'($urandom);
        #1;
        if (c < int'(N)) for (int j = 0; j < int'(TAPS); j++) got[j][c] = taps[j];
        @(negedge clk);
      end
      for (int j = 0; j < int'(TAPS); j++) begin
        d = p - (j + 1) * int'(SPACING);
        expv = (d >= 0) ? seq[d] : '0;
        checks++;
        if (got[j] !== expv) begin
          failures++;
          $display("FAIL p=%0d tap %0d got %h exp %h", p, j, got[j], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
