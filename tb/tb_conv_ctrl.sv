// tb_conv_ctrl -- self-checking test of the convolution control FSM.
// Runs the test sequence of conv_ctrl_tester on two configurations of a 4x3
// image: the network's 2x2 kernel (one padding column on the right and one
// padding row at the bottom, 5x4 grid) and a 3x3 kernel (one padding row and
// column on every side, 6x5 grid). Each checks pad, in_ready, shift and
// win_valid against a model of the padded grid under random stalls, and the
// (W+K-1)*(H+K-1) cycles of a full-rate frame.
module tb_conv_ctrl;
  logic done2, done3;
  int   checks2, failures2, checks3, failures3;

  conv_ctrl_tester #(.K(2), .W(4), .H(3)) t2 (.done(done2), .checks(checks2), .failures(failures2));
  conv_ctrl_tester #(.K(3), .W(4), .H(3)) t3 (.done(done3), .checks(checks3), .failures(failures3));

  initial begin
    #200000;
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
