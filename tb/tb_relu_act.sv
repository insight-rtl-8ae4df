// tb_relu_act: with the 2n-m pad delay modelled in the testbench, the word
// read in phi0 of the next period must be max(0, truncated sum) for random
// 2n-bit sums; both signs are counted and must each occur.
module tb_relu_act;
  import insight_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned M = 7;
  localparam int unsigned D = 2 * N - M;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic d_in = 1'b0, d_out = 1'b0, y_bit;
  logic hist [$];
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  relu_act #(.N(N), .M(M)) dut (.clk, .rst_n, .tm, .d_in, .d_out, .y_bit);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2*N-1:0] v, prev;
    logic [N-1:0]   got;
    longint         exp_w;
    int             cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!tm.first) @(negedge clk);
    cyc = 0;
    prev = '0;
    for (int p = 0; p < 60; p++) begin
      v = {$urandom, $urandom};
      for (int c = 0; c < 2 * N; c++) begin
        d_in = v[c];
        hist.push_back(d_in);
        d_out = (cyc >= D) ? hist[cyc - D] : 1'b0;
        #1;
        if (c < N) got[c] = y_bit;
        cyc++;
        @(negedge clk);
      end
      if (p > 0) begin
        exp_w = trunc_word(longint'(prev), N, M, 1'b1);
        if (trunc_word(longint'(prev), N, M, 1'b0) < 0) n_neg++; else n_pos++;
        checks++;
        if (longint'(got) != exp_w) begin
          failures++;
          $display("FAIL period %0d got %h exp %h", p, got, exp_w);
        end
      end
      prev = v;
    end
    checks++;
    if (n_neg == 0 || n_pos == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
