// conv_ctrl_tester -- test sequence for one conv_ctrl configuration, used by
// tb_conv_ctrl. Walks several frames of a W x H image with a KxK kernel,
// with random input gaps and random pipeline stalls, and checks the FSM
// against a model of the padded grid of (H+K-1) x (W+K-1) positions with
// PT = (K-1)/2 zero rows and columns before the image: pad is high exactly
// on the padding positions, a pixel is taken only at real positions,
// win_valid marks exactly the W*H output positions (row and column >= K-1,
// one cycle after the shift), and at full rate a frame costs (W+K-1)*(H+K-1)
// cycles. Runs on its own clock; raises done when finished.
module conv_ctrl_tester #(
  parameter int K = 2,
  parameter int W = 4,
  parameter int H = 3
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int GW = W + K - 1, GH = H + K - 1, PT = (K - 1) / 2;
  logic clk = 0, rst_n = 0, adv = 0, in_valid = 0;
  logic in_ready, pad, shift, win_valid;
  int   mr = 0, mc = 0;          // model grid position
  logic exp_wv = 0;
  int   n_pad = 0, n_take = 0, n_out = 0;

  conv_ctrl #(.IMG_W(W), .IMG_H(H), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    done = 0; checks = 0; failures = 0;
  end

  task automatic step(bit a, bit v);
    logic e_pad;
    adv <= a; in_valid <= v;
    #1;
    e_pad = (mr < PT) || (mr >= PT + H) || (mc < PT) || (mc >= PT + W);
    checks++;
    if (pad !== e_pad || in_ready !== (a && !e_pad) || shift !== (a && (e_pad || v)) || win_valid !== exp_wv) begin
      failures++;
      if (failures < 10) $display("K=%0d r=%0d c=%0d pad=%b in_ready=%b shift=%b wv=%b/%b", K, mr, mc, pad, in_ready, shift, win_valid, exp_wv);
    end
    @(posedge clk);
    if (a) exp_wv = (e_pad || v) && mr >= K - 1 && mc >= K - 1;
    if (a && (e_pad || v)) begin
      if (e_pad) n_pad++; else n_take++;
      if (mr >= K - 1 && mc >= K - 1) n_out++;
      if (mc == GW - 1) begin mc = 0; mr = (mr == GH - 1) ? 0 : mr + 1; end
      else mc++;
    end
  endtask

  initial begin
    longint t0, cyc;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 3 * GW * GH * 3; t++) step($urandom_range(3) != 0, $urandom_range(2) != 0);
    // run to the start of a frame, then one frame at full rate
    while (!(mr == 0 && mc == 0)) step(1, 1);
    t0 = $time;
    n_pad = 0; n_take = 0; n_out = 0;
    do step(1, 1); while (!(mr == 0 && mc == 0));
    cyc = ($time - t0) / 10;
    checks++;
    if (cyc != GW * GH || n_take != W*H || n_pad != GW*GH - W*H || n_out != W*H) begin
      failures++;
      $display("K=%0d frame: cycles=%0d takes=%0d pads=%0d outs=%0d", K, cyc, n_take, n_pad, n_out);
    end
    done = 1;
  end
endmodule
