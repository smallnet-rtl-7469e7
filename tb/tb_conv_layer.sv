// tb_conv_layer -- self-checking test of the convolutional neuron.
// Runs the test sequence of conv_layer_tester on two configurations: the
// network's 2x2 kernel on a 6x5 image and a 3x3 kernel on a 7x5 image. Each
// compares every output pixel with the reference convolution under random
// input gaps and back-pressure, provokes saturation, and checks the
// first-output latency and the cycles of a full-rate frame.
module tb_conv_layer;
  logic done2, done3;
  int   checks2, failures2, checks3, failures3;

  conv_layer_tester #(.K(2), .W(6), .H(5)) t2 (.done(done2), .checks(checks2), .failures(failures2));
  conv_layer_tester #(.K(3), .W(7), .H(5)) t3 (.done(done3), .checks(checks3), .failures(failures3));

  initial begin
    #500000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks2 + checks3, failures2 + failures3 + 1);
    $finish;
  end

  initial begin
    wait (done2 && done3);
    $display("TB_RESULT checks=%0d failures=%0d", checks2 + checks3, failures2 + failures3);
    $finish;
  end
endmodule
