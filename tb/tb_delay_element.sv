// tb_delay_element: the word read in phi0 must be the word written one
// period earlier (zero after reset); input driven with junk in phi1 must not
// disturb it.
module tb_delay_element;
  import insight_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic d_in = 1'b0, d_out;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  delay_element #(.N(N)) dut (.clk, .rst_n, .tm, .d_in, .d_out);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] v, prev, got;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!tm.first) @(negedge clk);
    prev = '0;
    for (int p = 0; p < 40; p++) begin
      v = N'($urandom);
      for (int c = 0; c < 2 * int'(N); c++) begin
        d_in = (c < int'(N)) ? v[c] : 1'($urandom);
        #1;
        if (c < int'(N)) got[c] = d_out;
        @(negedge clk);
      end
      checks++;
      if (got !== prev) begin
        failures++;
        $display("FAIL period %0d got %h exp %h", p, got, prev);
      end
      prev = v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
