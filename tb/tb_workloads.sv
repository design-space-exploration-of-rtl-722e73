// tb_workloads: runs the fully-connected workloads of the evaluation that a
// three-layer build can hold, with their own sizes and one ratio set each:
//   FMNIST net-3, 784-1024-1024-300 (10 classes x 30), ratios (32, 32, 8)
//   MNIST  net-1, 784-500-500-300, ratios (4, 4, 4)
// One sample of 15 steps each, with weights from the test generator and about
// 12 % of the inputs spiking; every output train is checked against the
// reference model.
module tb_workloads;
  tb_net_runner #(.NAME("net3_fmnist_32_32_8"), .N1(1024), .N2(1024), .N3(300),
                  .L1(32), .L2(32), .L3(8)) net3 ();
  tb_net_runner #(.NAME("net1_mnist_4_4_4"), .L1(4), .L2(4), .L3(4)) net1 ();

  initial begin
    wait (net3.finished && net1.finished);
    $display("TB_RESULT checks=%0d failures=%0d", net3.checks + net1.checks,
             net3.failures + net1.failures);
    $finish;
  end

  initial begin
    #200000000;
    $display("TB_RESULT checks=%0d failures=%0d", net3.checks + net1.checks,
             net3.failures + net1.failures + 1);
    $finish;
  end
endmodule
