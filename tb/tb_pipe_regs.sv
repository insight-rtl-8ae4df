// tb_pipe_regs: a random bit stream must come out exactly D cycles later.
module tb_pipe_regs;
  localparam int unsigned D = 25;
  logic clk = 1'b0, rst_n = 1'b0;
  logic d_in = 1'b0, d_out;
  logic hist [$];
  int checks = 0, failures = 0;

  pipe_regs #(.D(D)) dut (.clk, .rst_n, .d_in, .d_out);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      d_in = 1'($urandom);
      hist.push_back(d_in);
      #1;
      if (i >= D) begin
        checks++;
        if (d_out !== hist[i - D]) begin
          failures++;
          $display("FAIL cycle %0d", i);
        end
      end else begin
        checks++;
        if (d_out !== 1'b0) begin
          failures++;
          $display("FAIL not reset at cycle %0d", i);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
