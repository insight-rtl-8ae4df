// tb_kin_adder: k-input serial addition against integer sums.
// Each period K random 2n-bit numbers are sent LSB first; the sum bits,
// read in the same cycle (zero latency), must equal the low 2n bits of
// their sum. Periods follow back to back, so a carry left over from one
// period must not leak into the next.
module tb_kin_adder;
  import insight_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned K = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic [K-1:0] in_bits = '0;
  logic s_bit;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  kin_adder #(.K(K)) dut (.clk, .rst_n, .tm, .in_bits, .s_bit);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2*N-1:0] v [K];
    logic [2*N-1:0] got, sum;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!tm.first) @(negedge clk);
    for (int p = 0; p < 40; p++) begin
      sum = '0;
      for (int i = 0; i < K; i++) begin
        v[i] = {$urandom, $urandom};
        if (p == 0) v[i] = '1;                 // all -1: maximal carries
        sum += v[i];
      end
      for (int c = 0; c < 2 * N; c++) begin
        for (int i = 0; i < K; i++) in_bits[i] = v[i][c];
        #1;
        got[c] = s_bit;
        @(negedge clk);
      end
      checks++;
      if (got !== sum) begin
        failures++;
        $display("FAIL period %0d got %h exp %h", p, got, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
