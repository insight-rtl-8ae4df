// tb_phase_gen: checks the period counter and phase flags of phase_gen.
// Over several periods it checks cnt steps 0..2n-1 and wraps, that phi0 is
// high for exactly the first n cycles, and that first/last mark the period
// ends; it also counts the cycles between two "first" pulses (must be 2n).
module tb_phase_gen;
  import insight_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) dut (.clk, .rst_n, .tm);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cnt=%0d)", what, tm.cnt);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_cnt, last_first, cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    exp_cnt = 0; last_first = -1; cyc = 0;
    #1;
    for (int i = 0; i < 10 * 2 * N; i++) begin
      check(int'(tm.cnt) == exp_cnt, "cnt");
      check(tm.phi0 == (exp_cnt < N), "phi0");
      check(tm.first == (exp_cnt == 0), "first");
      check(tm.last == (exp_cnt == 2 * N - 1), "last");
      if (tm.first) begin
        if (last_first >= 0) check(cyc - last_first == 2 * N, "period length");
        last_first = cyc;
      end
      exp_cnt = (exp_cnt + 1) % (2 * N);
      cyc++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
