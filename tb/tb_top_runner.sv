// tb_top_runner: drives one insight_top instance through one image and
// checks every valid output against the bit-true reference. Used by the
// workload testbenches, which instantiate it with a network shape.
// Weights are uniform in [-WMAX, WMAX-1] (units of 2^-m), pixels in [0, 2^m)
// (i.e. [0, 1)). It checks: every output word, the number of valid outputs,
// and the time from the first pixel period to the first output,
// ((KH-1)W + KW-1 + 6) periods of 2n cycles. ReLU clamps are reported in
// `clamps`. `done` rises when the run is over.
module tb_top_runner
  import insight_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int C = 1, H = 28, W = 28, KH = 28, KW = 28, RC = 4, RV = 6, RF = 6, F = 10,
  parameter int N = 16, M = 7,
  parameter bit RELU = 1'b0,
  parameter int WMAX = 16
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   clamps
);
  localparam int HW = H * W;
  localparam int NOUT = (H - KH + 1) * (W - KW + 1);
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

  insight_top #(.C(C), .H(H), .W(W), .KH(KH), .KW(KW), .RC(RC), .RV(RV), .RF(RF), .F(F),
                .N(N), .M(M), .RELU(RELU)) dut (
    .clk, .rst_n, .wr_en, .wr_ch, .wr_addr, .wr_data, .start, .wload, .w_si, .w_so,
    .out_valid, .out_x, .out_y, .out_data, .busy);

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %m: %s", what);
    end
  endtask

  initial begin
    longint wv[], img[], y[], pre[];
    int c_first, n_out, t;
    done = 1'b0;
    checks = 0;
    failures = 0;
    clamps = 0;
    n_out = 0;
    wv = new[NREG];
    foreach (wv[i]) wv[i] = longint'($urandom_range(0, 2 * WMAX - 1)) - WMAX;
    img = new[C * HW];
    foreach (img[i]) img[i] = longint'($urandom_range(0, (1 << M) - 1));
    layer_ref(img, HW, C, W, KH, KW, RC, RV, RF, F, N, M, RELU, wv, y, pre);
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
    for (int z = 0; z < C; z++)
      for (int a = 0; a < HW; a++) begin
        @(negedge clk);
        wr_en = 1'b1;
        wr_ch = idx_w(C)'(z);
        wr_addr = idx_w(HW)'(a);
        wr_data = N'(img[z * HW + a]);
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
        t = int'(out_y) * W + int'(out_x);
        if (n_out == 0)
          check(cyc - c_first == ((KH - 1) * W + KW - 1 + 6) * 2 * N, "first-output latency");
        n_out++;
        for (int f = 0; f < F; f++) begin
          check(longint'(signed'(out_data[f])) == y[f * HW + t],
                $sformatf("t=%0d f=%0d got %0d exp %0d", t, f, signed'(out_data[f]), y[f * HW + t]));
          if (pre[f * HW + t] < 0) clamps++;
        end
      end
    end
    check(n_out == NOUT, $sformatf("%0d valid outputs, expected %0d", n_out, NOUT));
    done = 1'b1;
  end
endmodule
