// tb_frame_buffer: writes a random 2-channel image, starts it and checks
// that the following H*W periods carry pixel t = yW + x of each channel, LSB
// first in phi0, with s_valid, s_x and s_y naming it; that the frame takes
// exactly H*W periods (one pixel per 2n cycles); that a start given while a
// frame is streaming makes the next frame follow without a gap; and that
// idle periods carry zeros with s_valid low.
module tb_frame_buffer;
  import insight_pkg::*;
  localparam int unsigned N = 16, C = 2, H = 3, W = 4;
  localparam int HW = H * W;
  logic clk = 1'b0, rst_n = 1'b0;
  bs_timing_t tm;
  logic wr_en = 1'b0, start = 1'b0;
  logic [idx_w(C)-1:0] wr_ch = '0;
  logic [idx_w(HW)-1:0] wr_addr = '0;
  logic [N-1:0] wr_data = '0;
  logic [C-1:0] s_bits;
  logic s_valid, busy;
  logic [idx_w(W)-1:0] s_x;
  logic [idx_w(H)-1:0] s_y;
  int checks = 0, failures = 0;

  phase_gen #(.N(N)) u_pg (.clk, .rst_n, .tm);
  frame_buffer #(.C(C), .H(H), .W(W), .N(N)) dut (
    .clk, .rst_n, .tm, .wr_en, .wr_ch, .wr_addr, .wr_data, .start,
    .s_bits, .s_valid, .s_x, .s_y, .busy);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    logic [N-1:0] img [C][HW];
    logic [N-1:0] got [C];
    int t, vperiods;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int z = 0; z < int'(C); z++)
      for (int a = 0; a < HW; a++) begin
        img[z][a] = N'($urandom);
        wr_en = 1'b1;
        wr_ch = idx_w(C)'(z);
        wr_addr = idx_w(HW)'(a);
        wr_data = img[z][a];
        @(negedge clk);
      end
    wr_en = 1'b0;
    check(!busy, "idle before start");
    // start in the middle of a period
    while (int'(tm.cnt) != 5) @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!tm.first) @(negedge clk);
    // frames 0 and 1 back to back, then idle periods
    vperiods = 0;
    for (int p = 0; p < 2 * HW + 3; p++) begin
      for (int c = 0; c < 2 * int'(N); c++) begin
        // request the second frame while the first is streaming
        start = (p == HW / 2 && c == 3);
        #1;
        if (c < int'(N)) for (int z = 0; z < int'(C); z++) got[z][c] = s_bits[z];
        else check(s_bits == '0, "idle in phi1");
        if (c == 0) begin
          if (p < 2 * HW) begin
            t = p % HW;
            check(s_valid, "s_valid during frame");
            check(int'(s_x) == t % int'(W) && int'(s_y) == t / int'(W), "pixel position");
          end else begin
            check(!s_valid, "s_valid low after frames");
          end
          if (s_valid) vperiods++;
        end
        @(negedge clk);
      end
      for (int z = 0; z < int'(C); z++)
        if (p < 2 * HW) check(got[z] == img[z][p % HW], "pixel value");
        else            check(got[z] == '0, "zero when idle");
    end
    check(vperiods == 2 * HW, "two frames take 2*H*W periods");
    check(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
