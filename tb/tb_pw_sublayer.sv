// tb_pw_sublayer: a pointwise sublayer with bias and ReLU against the
// bit-true reference. Weights go in over the scan chain, whose length and
// order are checked by shifting one word through it; then a random sequence
// of input words is streamed and each output word, one period later, is
// compared. ReLU clamps are counted and must occur.
module tb_pw_sublayer;
  import insight_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned M = 7;
  localparam int unsigned CIN = 3;
  localparam int unsigned COUT = 4;
  localparam int T = 40;
  int clamps = 0;
  localparam int CIN_ = CIN;
  localparam int COUT_ = COUT;
  localparam int LAT = 1;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic [CIN_-1:0]  x_bits = '0;
  logic [COUT_-1:0] y_bits;
  logic wload = 1'b0, w_si = 1'b0, w_so;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  pw_sublayer #(.CIN(CIN), .COUT(COUT), .N(N), .M(M), .HAS_BIAS(1'b1), .RELU(1'b1)) dut (
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
    wv = new[COUT * (CIN + 1)];
    foreach (wv[i]) wv[i] = longint'($urandom_range(0, 255)) - 128;
    x = new[CIN_ * T];
    foreach (x[i]) x[i] = longint'($urandom_range(0, 511)) - 256;
    wi = 0;
    sub_ref(x, T, CIN, COUT, 1, 1, 1'b1, 1'b1, N, M, wv, wi, y_ref);
    wi = 0;
    sub_ref(x, T, CIN, COUT, 1, 1, 1'b1, 1'b0, N, M, wv, wi, pre);
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
