// tb_insight_full: one complete MNIST-sized operation with every parameter
// of insight_top at its default: a 28x28 single-channel image through the
// factorized 784 -> 10 layer (ranks 4/6/6, n = 16, m = 7).
// All 1790 weight and bias registers are loaded over the scan chain, a
// random image with pixel values in [0, 1) is written and started, and the
// single valid output (10 words at x = y = 27) is compared with the bit-true
// reference. The time from the first pixel to the output must be
// (784 + 5) periods of 32 cycles plus the deserializer period: the 784
// periods are the 156.8 us per image at 160 MHz.
module tb_insight_full;
  import insight_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 1, H = 28, W = 28, KH = 28, KW = 28, RC = 4, RV = 6, RF = 6, F = 10;
  localparam int N = 16, M = 7;
  localparam int HW = H * W;
  localparam int NREG = C * RC + RC * KH * RV + RV * KW * RV + RV * RF + RF * F + F;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, start = 1'b0, wload = 1'b0, w_si = 1'b0, w_so;
  logic [idx_w(C)-1:0] wr_ch = '0;
  logic [idx_w(HW)-1:0] wr_addr = '0;
  logic [N-1:0] wr_data = '0;
  logic out_valid, busy;
  logic [idx_w(W)-1:0] out_x;
  logic [idx_w(H)-1:0] out_y;
  logic [N-1:0] out_data [F];
  int checks = 0, failures = 0, n_out = 0;

  insight_top dut (
    .clk, .rst_n, .wr_en, .wr_ch, .wr_addr, .wr_data, .start, .wload, .w_si, .w_so,
    .out_valid, .out_x, .out_y, .out_data, .busy);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    longint wv[], img[], y[], pre[];
    int c_first, c_out;
    wv = new[NREG];
    foreach (wv[i]) wv[i] = longint'($urandom_range(0, 31)) - 16;   // +-0.125
    img = new[C * HW];
    foreach (img[i]) img[i] = longint'($urandom_range(0, 127));    // [0, 1)
    layer_ref(img, HW, C, W, KH, KW, RC, RV, RF, F, N, M, 1'b0, wv, y, pre);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = NREG - 1; r >= 0; r--)
      for (int b = 0; b < N; b++) begin
        @(negedge clk);
        wload = 1'b1;
        w_si = 1'(wv[r] >>> b);
      end
    @(negedge clk);
    wload = 1'b0;
    for (int a = 0; a < HW; a++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_addr = idx_w(HW)'(a);
      wr_data = N'(img[a]);
    end
    @(negedge clk);
    wr_en = 1'b0;
    while (!dut.u_phase.tm.first) @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!dut.u_phase.tm.first) @(negedge clk);
    c_first = cyc;
    while (busy) begin
      @(negedge clk);
      if (out_valid) begin
        n_out++;
        c_out = cyc;
        check(int'(out_x) == W - 1 && int'(out_y) == H - 1, "output position");
        for (int f = 0; f < F; f++)
          check(longint'(signed'(out_data[f])) == y[f * HW + HW - 1],
                $sformatf("class %0d: got %0d exp %0d", f, signed'(out_data[f]), y[f * HW + HW - 1]));
      end
    end
    check(n_out == 1, "exactly one output per frame");
    check(c_out - c_first == (HW + 5) * 2 * N, $sformatf("frame latency %0d cycles", c_out - c_first));
    $display("frame: %0d pixel periods, first output %0d cycles after the first pixel", HW, c_out - c_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
