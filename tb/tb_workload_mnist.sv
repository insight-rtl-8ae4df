// tb_workload_mnist: the single-layer MNIST classifier (784 inputs, 10
// outputs, no activation) at two further degrees of approximation, with the
// ranks that reproduce the published delay-unit counts: (RC, RV) = (2, 2)
// gives 27*(28*2+2) = 1566 delay units, (6, 9) gives 27*(28*6+9) = 4779.
// RF is not published and is set equal to RV. (The default configuration,
// ranks 4/6/6 with 3186 delay units, is run by the full-size testbench.)
// One random image per configuration; every output word is checked.
module tb_workload_mnist;
  logic d0, d1;
  int c0, f0, k0, c1, f1, k1;
  int checks, failures;

  tb_top_runner #(.RC(2), .RV(2), .RF(2)) u_82 (.done(d0), .checks(c0), .failures(f0), .clamps(k0));
  tb_top_runner #(.RC(6), .RV(9), .RF(9)) u_51 (.done(d1), .checks(c1), .failures(f1), .clamps(k1));

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (d0 && d1);
    checks = c0 + c1;
    failures = f0 + f1;
    $display("ranks 2/2/2: %0d checks, ranks 6/9/9: %0d checks", c0, c1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
