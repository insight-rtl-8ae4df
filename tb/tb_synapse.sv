// tb_synapse: bit-serial multiplication against integer products.
// A random weight is shifted in through the scan chain, then each period a
// random n-bit input is sent LSB first in phi0 (random junk in phi1, which
// the synapse must ignore). The 2n product bits collected over the period
// must equal the low 2n bits of weight*input. The scan output is checked to
// return the weight as it is replaced.
module tb_synapse;
  import insight_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic x_bit = 1'b0, p_bit, wload = 1'b0, w_si = 1'b0, w_so;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  synapse #(.N(N)) dut (.clk, .rst_n, .tm, .x_bit, .p_bit, .wload, .w_si, .w_so);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0]   w, w_old, x, got_w;
    logic [2*N-1:0] prod, got;
    longint         pv;
    w_old = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 12; trial++) begin
      w = N'($urandom);
      if (trial == 0) w = {1'b1, {(N-1){1'b0}}};       // most negative
      if (trial == 1) w = {1'b0, {(N-1){1'b1}}};       // most positive
      // load weight, reading back the old one
      for (int b = 0; b < N; b++) begin
        @(negedge clk);
        got_w[b] = w_so;
        w_si = w[b];
        wload = 1'b1;
      end
      @(negedge clk);
      wload = 1'b0;
      checks++;
      if (got_w !== w_old) begin
        failures++;
        $display("FAIL scan out %h exp %h", got_w, w_old);
      end
      w_old = w;
      // align to a period start
      while (!tm.first) @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        x = N'($urandom);
        if (p == 0) x = {1'b1, {(N-1){1'b0}}};
        for (int c = 0; c < 2 * N; c++) begin
          x_bit = (c < N) ? x[c] : 1'(($urandom));
          #1;
          got[c] = p_bit;
          @(negedge clk);
        end
        pv = longint'(signed'(x)) * longint'(signed'(w));
        prod = (2*N)'(pv);
        checks++;
        if (got !== prod) begin
          failures++;
          $display("FAIL w=%0d x=%0d got %h exp %h", signed'(w), signed'(x), got, prod);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
