// tb_workload_conv: the first layer of the convolutional MNIST network as one
// factorized layer: 28x28 single-channel image, 5x5 kernel, 64 feature maps,
// ReLU, ranks RC = 1, RV = 2, RF = 2 (163 synapses plus 64 biases, near the
// 168 parameters published for this layer in its most simplified form; the
// kernel size and map count are inferred from its 1600 original parameters).
// Max-pooling, which follows this layer in the network, is not part of the
// design and is not modelled. All 24x24 valid positions are checked, and
// the ReLU must clamp at least once.
module tb_workload_conv;
  logic d0;
  int c0, f0, k0;

  tb_top_runner #(.KH(5), .KW(5), .RC(1), .RV(2), .RF(2), .F(64), .RELU(1'b1), .WMAX(64))
    u_l1 (.done(d0), .checks(c0), .failures(f0), .clamps(k0));

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0, f0 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (d0);
    $display("conv layer: %0d checks, %0d ReLU clamps", c0, k0);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + 1, f0 + ((k0 > 0) ? 0 : 1));
    $finish;
  end
endmodule
