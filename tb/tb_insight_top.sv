// tb_insight_top: end-to-end run of the system at a reduced size
// (2-channel 6x7 image, 3x2 kernel, ReLU on).
// Weights go in over the scan chain; then three frames are processed:
// frame A, frame A again requested while A is still streaming (back-to-back,
// no gap), and, after the system has gone idle, frame B written fresh.
// Every out_valid word is compared with the bit-true reference at its
// (x, y); each frame must produce exactly (H-KH+1)(W-KW+1) outputs; the first
// output must come (KH-1)W + KW-1 + 6 periods after the first pixel period
// (window fill, five sublayers, deserializer); outputs within a row must be
// one period (2n cycles) apart. Mechanisms counted, each must occur: ReLU
// clamps, negative inputs (sign extension in phi1), non-zero bias,
// back-to-back frames, frames after idle.
module tb_insight_top;
  import insight_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned C = 2, H = 6, W = 7, KH = 3, KW = 2, RC = 2, RV = 3, RF = 2, F = 3;
  localparam int unsigned N = 16, M = 7;
  localparam int HW = H * W;
  localparam int NOUT = (H - KH + 1) * (W - KW + 1);
  localparam int NREG = (C * RC + RC * KH * RV + RV * KW * RV + RV * RF + RF * F + F);
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, start = 1'b0, wload = 1'b0, w_si = 1'b0, w_so;
  logic [idx_w(C)-1:0] wr_ch = '0;
  logic [idx_w(HW)-1:0] wr_addr = '0;
  logic [N-1:0] wr_data = '0;
  logic out_valid, busy;
  logic [idx_w(W)-1:0] out_x;
  logic [idx_w(H)-1:0] out_y;
  logic [N-1:0] out_data [F];
  int checks = 0, failures = 0;
  int n_clamp = 0, n_neg_in = 0, n_bias = 0, n_b2b = 0, n_after_idle = 0;

  insight_top #(.C(C), .H(H), .W(W), .KH(KH), .KW(KW), .RC(RC), .RV(RV), .RF(RF), .F(F),
                .N(N), .M(M), .RELU(1'b1)) dut (
    .clk, .rst_n, .wr_en, .wr_ch, .wr_addr, .wr_data, .start, .wload, .w_si, .w_so,
    .out_valid, .out_x, .out_y, .out_data, .busy);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output log
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int o_cyc [$];
  int o_x [$], o_y [$];
  longint o_d [$];
  always @(negedge clk) if (out_valid) begin
    o_cyc.push_back(cyc);
    o_x.push_back(int'(out_x));
    o_y.push_back(int'(out_y));
    for (int f = 0; f < int'(F); f++) o_d.push_back(longint'(signed'(out_data[f])));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic write_image(input longint img[]);
    for (int z = 0; z < int'(C); z++)
      for (int a = 0; a < HW; a++) begin
        @(negedge clk);
        wr_en = 1'b1;
        wr_ch = idx_w(C)'(z);
        wr_addr = idx_w(HW)'(a);
        wr_data = N'(img[z * HW + a]);
        if (img[z * HW + a] < 0) n_neg_in++;
      end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  // compare outputs [first, first+NOUT) of the log with the reference image
  task automatic compare(input int first, input longint img[], input longint wv[]);
    longint y[], pre[];
    int t;
    layer_ref(img, HW, C, W, KH, KW, RC, RV, RF, F, N, M, 1'b1, wv, y, pre);
    for (int i = 0; i < NOUT; i++) begin
      t = o_y[first + i] * int'(W) + o_x[first + i];
      check(o_x[first + i] == KW - 1 + i % (W - KW + 1) && o_y[first + i] == KH - 1 + i / (W - KW + 1),
            "output position order");
      for (int f = 0; f < int'(F); f++) begin
        check(o_d[(first + i) * F + f] == y[f * HW + t], $sformatf("output t=%0d f=%0d", t, f));
        if (pre[f * HW + t] < 0) n_clamp++;
      end
      if (i > 0 && o_x[first + i] != KW - 1)
        check(o_cyc[first + i] - o_cyc[first + i - 1] == 2 * int'(N), "one output per period");
    end
  endtask

  initial begin
    longint wv[], img_a[], img_b[];
    int c_first;
    wv = new[NREG];
    foreach (wv[i]) wv[i] = longint'($urandom_range(0, 255)) - 128;
    for (int f = 0; f < int'(F); f++) if (wv[NREG - F + f] != 0) n_bias++;
    img_a = new[C * HW];
    img_b = new[C * HW];
    foreach (img_a[i]) img_a[i] = longint'($urandom_range(0, 511)) - 256;
    foreach (img_b[i]) img_b[i] = longint'($urandom_range(0, 511)) - 256;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // weights: last chain register first, LSB first
    for (int r = NREG - 1; r >= 0; r--)
      for (int b = 0; b < int'(N); b++) begin
        @(negedge clk);
        wload = 1'b1;
        w_si = 1'(wv[r] >>> b);
      end
    @(negedge clk);
    wload = 1'b0;
    write_image(img_a);
    // frame A, started at a period boundary so the latency can be measured
    while (!dut.u_phase.tm.first) @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!dut.u_phase.tm.first) @(negedge clk);
    c_first = cyc;                       // first pixel period begins
    // request the repeat of frame A while A streams
    repeat (HW * int'(N)) @(negedge clk);
    check(busy, "busy while streaming");
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    n_b2b++;
    wait (o_cyc.size() == 2 * NOUT);
    check(o_cyc[0] - c_first == (int'((KH - 1) * W + KW - 1) + 6) * 2 * int'(N),
          $sformatf("latency of first output: %0d cycles", o_cyc[0] - c_first));
    // back to back: frame 2's first output exactly H*W periods after frame 1's
    check(o_cyc[NOUT] - o_cyc[0] == HW * 2 * int'(N), "back-to-back frame spacing");
    while (busy) @(negedge clk);
    repeat (100) @(negedge clk);
    check(o_cyc.size() == 2 * NOUT, "output count, frames 1-2");
    write_image(img_b);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    n_after_idle++;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (100) @(negedge clk);
    check(o_cyc.size() == 3 * NOUT, "output count, frame 3");
    if (o_cyc.size() == 3 * NOUT) begin
      compare(0, img_a, wv);
      compare(NOUT, img_a, wv);
      compare(2 * NOUT, img_b, wv);
    end
    $display("mechanisms: relu_clamps=%0d negative_inputs=%0d nonzero_bias=%0d back_to_back=%0d after_idle=%0d",
             n_clamp, n_neg_in, n_bias, n_b2b, n_after_idle);
    check(n_clamp > 0, "ReLU clamp exercised");
    check(n_neg_in > 0, "negative input exercised");
    check(n_bias > 0, "bias exercised");
    check(n_b2b > 0, "back-to-back frame exercised");
    check(n_after_idle > 0, "frame after idle exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
