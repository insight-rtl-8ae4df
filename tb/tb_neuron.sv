// tb_neuron: two neurons on the same k input streams, one plain (no bias, no
// activation) and one with bias and ReLU. Weights and biases go in through
// the scan chains. Every period random words are sent; the word each neuron
// emits in phi0 of the next period must match the bit-true reference
// (truncated weighted sum, plus bias and ReLU for the second). The output
// must be 0 throughout phi1, and the ReLU must have clamped at least once.
module tb_neuron;
  import insight_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned M = 7;
  localparam int unsigned K = 3;
  localparam int T = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic [K-1:0] x_bits = '0;
  logic ya, yb, wl_a = 1'b0, wl_b = 1'b0, si = 1'b0, so_a, so_b;
  int checks = 0, failures = 0, clamps = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  neuron #(.K(K), .N(N), .M(M)) dut_a (
    .clk, .rst_n, .tm, .x_bits, .y_bit(ya), .wload(wl_a), .w_si(si), .w_so(so_a));
  neuron #(.K(K), .N(N), .M(M), .HAS_BIAS(1'b1), .RELU(1'b1)) dut_b (
    .clk, .rst_n, .tm, .x_bits, .y_bit(yb), .wload(wl_b), .w_si(si), .w_so(so_b));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input longint wv[], input bit which);
    for (int r = wv.size() - 1; r >= 0; r--)
      for (int b = 0; b < int'(N); b++) begin
        @(negedge clk);
        si = 1'(wv[r] >>> b);
        if (which) wl_b = 1'b1; else wl_a = 1'b1;
      end
    @(negedge clk);
    wl_a = 1'b0;
    wl_b = 1'b0;
  endtask

  initial begin
    longint wa[], wb[], x[], ya_ref[], yb_ref[], yb_pre[];
    logic [N-1:0] ga, gb;
    int wi;
    wa = new[K];
    wb = new[K + 1];
    for (int i = 0; i < int'(K); i++) begin
      wa[i] = longint'($urandom_range(0, 511)) - 256;
      wb[i] = longint'($urandom_range(0, 511)) - 256;
    end
    wb[K] = longint'($urandom_range(0, 255)) - 128;
    x = new[K * T];
    foreach (x[i]) x[i] = longint'($urandom_range(0, 511)) - 256;
    wi = 0; sub_ref(x, T, K, 1, 1, 1, 1'b0, 1'b0, N, M, wa, wi, ya_ref);
    wi = 0; sub_ref(x, T, K, 1, 1, 1, 1'b1, 1'b1, N, M, wb, wi, yb_ref);
    wi = 0; sub_ref(x, T, K, 1, 1, 1, 1'b1, 1'b0, N, M, wb, wi, yb_pre);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(wa, 1'b0);
    load(wb, 1'b1);
    while (!tm.first) @(negedge clk);
    for (int p = 0; p <= T; p++) begin
      for (int c = 0; c < 2 * int'(N); c++) begin
        for (int i = 0; i < int'(K); i++)
          x_bits[i] = (p < T && c < int'(N)) ? 1'(x[i * T + p] >>> c) : 1'($urandom);
        #1;
        if (c < int'(N)) begin
          ga[c] = ya;
          gb[c] = yb;
        end else begin
          checks++;
          if (ya !== 1'b0 || yb !== 1'b0) begin
            failures++;
            $display("FAIL output not idle in phi1");
          end
        end
        @(negedge clk);
      end
      if (p > 0) begin
        checks += 2;
        if (longint'(signed'(ga)) != ya_ref[p-1]) begin
          failures++;
          $display("FAIL plain p=%0d got %0d exp %0d", p - 1, signed'(ga), ya_ref[p-1]);
        end
        if (longint'(signed'(gb)) != yb_ref[p-1]) begin
          failures++;
          $display("FAIL bias/relu p=%0d got %0d exp %0d", p - 1, signed'(gb), yb_ref[p-1]);
        end
        if (yb_pre[p-1] < 0) clamps++;
      end
    end
    checks++;
    if (clamps == 0) begin
      failures++;
      $display("FAIL ReLU never clamped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
