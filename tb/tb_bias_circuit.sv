// tb_bias_circuit: the stream out must be the stream in plus the bias shifted
// left by m (low 2n bits), for random sums and random biases loaded over the
// scan chain, including the most negative bias.
module tb_bias_circuit;
  import insight_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned M = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic a_bit = 1'b0, s_bit, wload = 1'b0, w_si = 1'b0, w_so;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  bias_circuit #(.N(N), .M(M)) dut (.clk, .rst_n, .tm, .a_bit, .s_bit, .wload, .w_si, .w_so);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0]   b;
    logic [2*N-1:0] a, got, exp_s;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 8; trial++) begin
      b = N'($urandom);
      if (trial == 0) b = {1'b1, {(N-1){1'b0}}};
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        w_si = b[i];
        wload = 1'b1;
      end
      @(negedge clk);
      wload = 1'b0;
      while (!tm.first) @(negedge clk);
      for (int p = 0; p < 6; p++) begin
        a = {$urandom, $urandom};
        exp_s = a + ((2*N)'(signed'(b)) << M);
        for (int c = 0; c < 2 * N; c++) begin
          a_bit = a[c];
          #1;
          got[c] = s_bit;
          @(negedge clk);
        end
        checks++;
        if (got !== exp_s) begin
          failures++;
          $display("FAIL b=%h a=%h got %h exp %h", b, a, got, exp_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
