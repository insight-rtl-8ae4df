// tb_tdnn_layer: the five-sublayer layer at a small size (2 input channels,
// 5-wide sequence, 3x2 kernel, ReLU on) against the bit-true reference. Scan
// chain length/order is checked; then a random sequence is streamed and each
// output word, five periods (one per sublayer) later, compared at every
// sample, so the delay lines' contents are checked too. ReLU clamps are
// counted and must occur.
module tb_tdnn_layer;
  import insight_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned M = 7;
  localparam int unsigned C = 2, W = 5, KH = 3, KW = 2, RC = 2, RV = 3, RF = 2, F = 3;
  localparam int T = 45;
  int clamps = 0;
  localparam int CIN_ = C;
  localparam int COUT_ = F;
  localparam int LAT = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic [CIN_-1:0]  x_bits = '0;
  logic [COUT_-1:0] y_bits;
  logic wload = 1'b0, w_si = 1'b0, w_so;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  tdnn_layer #(.C(C), .W(W), .KH(KH), .KW(KW), .RC(RC), .RV(RV), .RF(RF), .F(F), .N(N), .M(M),
               .RELU(1'b1)) dut (
    .clk, .rst_n, .tm, .x_bits, .y_bits, .wload, .w_si, .w_so);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint wv[], x[], y_ref[], pre[];
    logic [N-1:0] got [COUT_];
    logic [N-1:0] chk;
    int wi;
    wv = new[layer_nregs(C, KH, KW, RC, RV, RF, F)];
    foreach (wv[i]) wv[i] = longint'($urandom_range(0, 255)) - 128;
    x = new[CIN_ * T];
    foreach (x[i]) x[i] = longint'($urandom_range(0, 511)) - 256;
    wi = 0;
    layer_ref(x, T, C, W, KH, KW, RC, RV, RF, F, N, M, 1'b1, wv, y_ref, pre);
    foreach (pre[i]) if (pre[i] < 0) clamps++;
    if (clamps == 0) failures++;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // weights: last register of the chain first, each LSB first
    for (int r = wv.size() - 1; r >= 0; r--)
      for (int b = 0; b < int'(N); b++) begin
        @(negedge clk);
        w_si = 1'(wv[r] >>> b);
        wload = 1'b1;
      end
    @(negedge clk);
    wload = 1'b0;
    // the chain must now hand back what was shifted in first
    wload = 1'b1;
    for (int b = 0; b < int'(N); b++) begin
      chk[b] = w_so;
      w_si = 1'(wv[wv.size() - 1] >>> b);
      @(negedge clk);
    end
    wload = 1'b0;
    checks++;
    if (longint'(signed'(chk)) != wv[wv.size() - 1]) begin
      failures++;
      $display("FAIL scan chain length/order");
    end
    // that shifted the chain by one word: reload it
    for (int r = wv.size() - 1; r >= 0; r--)
      for (int b = 0; b < int'(N); b++) begin
        @(negedge clk);
        w_si = 1'(wv[r] >>> b);
        wload = 1'b1;
      end
    @(negedge clk);
    wload = 1'b0;
    while (!tm.first) @(negedge clk);
    for (int p = 0; p < T + LAT; p++) begin
      for (int c = 0; c < 2 * int'(N); c++) begin
        for (int i = 0; i < CIN_; i++)
          x_bits[i] = (p < T && c < int'(N)) ? 1'(x[i * T + p] >>> c) : 1'($urandom);
        #1;
        if (c < int'(N)) for (int o = 0; o < COUT_; o++) got[o][c] = y_bits[o];
        @(negedge clk);
      end
      if (p >= LAT) begin
        for (int o = 0; o < COUT_; o++) begin
          checks++;
          if (longint'(signed'(got[o])) != y_ref[o * T + p - LAT]) begin
            failures++;
            if (failures < 10)
              $display("FAIL t=%0d out %0d got %0d exp %0d", p - LAT, o, signed'(got[o]), y_ref[o * T + p - LAT]);
          end

        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
