// conv_layer_tester -- test sequence for one conv_layer configuration, used
// by tb_conv_layer. Loads random taps and bias through the write port,
// streams random images (with random input gaps and random output
// back-pressure) and compares every output pixel with the reference KxK
// convolution (same padding, ReLU). A second part uses large weights so that
// sums saturate, and a third streams one image at full rate and checks the
// latency of the first output and the cycles of the frame.
//
// Timing expected in the third part, with GW = W+K-1 and PT = (K-1)/2: while
// the layer waits for an image its controller has already walked the PT
// padding rows and the PT padding columns before the first pixel. The window
// of output (0,0) is completed D = (K-1-PT)*(GW+1) grid positions after the
// first pixel; that output is valid two edges after it and is seen at the
// D+4th edge after the first word is offered. The whole frame, until the last
// output is taken, costs GW*(H+K-1) - PT*(GW+1) + 3 cycles. Runs on its own
// clock; raises done when finished.
module conv_layer_tester
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;
#(
  parameter int K = 2,
  parameter int W = 6,
  parameter int H = 5
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int N = K*K, AW = $clog2(N + 1);
  localparam int GW = W + K - 1, GH = H + K - 1, PT = (K - 1) / 2;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, wr_en = 0, sat;
  fx_t  in_data = 0, out_data, wr_data = 0;
  logic [AW-1:0] wr_addr = 0;
  int   n_sat = 0, n_stall = 0;
  int   expq[$];
  bit   rand_in = 1, rand_out = 1;

  conv_layer #(.IMG_W(W), .IMG_H(H), .K(K), .ACT(ACT_RELU)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    done = 0; checks = 0; failures = 0;
  end

  // output side: random ready, compare with the expected queue
  always @(posedge clk) begin
    if (rst_n) begin
      if (sat) n_sat++;
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        checks++;
        if (expq.size() == 0) begin failures++; $display("K=%0d unexpected output", K); end
        else begin
          int e;
          e = expq.pop_front();
          if (out_data !== e) begin
            failures++;
            if (failures < 10) $display("K=%0d out=%h exp=%h", K, out_data, e);
          end
        end
      end
      out_ready <= rand_out ? ($urandom_range(3) != 0) : 1'b1;
    end
  end

  task automatic load(arr_t w, int b);
    for (int k = 0; k <= N; k++) begin
      wr_en <= 1; wr_addr <= AW'(k); wr_data <= (k < N) ? w[k] : b;
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
  endtask

  // Drive one word per pixel; it moves on the first rising edge at which
  // in_ready is high.
  task automatic send(arr_t img);
    foreach (img[i]) begin
      while (rand_in && $urandom_range(4) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
      in_valid <= 1'b1;
      in_data  <= img[i];
      do @(posedge clk); while (!in_ready);
    end
    in_valid <= 0;
  endtask

  task automatic run_image(arr_t w, int b, int range);
    arr_t img, y;
    img = new[W*H];
    foreach (img[i]) img[i] = (range > 0) ? int'($urandom_range(range)) : int'($urandom);
    y = rconvk(img, W, H, w, b, K, K_RELU);
    foreach (y[i]) expq.push_back(y[i]);
    send(img);
  endtask

  initial begin
    arr_t w;
    int b, d;
    longint t_first, t_in, cyc;
    w = new[N];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int im = 0; im < 6; im++) begin
      foreach (w[k]) w[k] = rnd_fx(ONE);
      b = rnd_fx(ONE / 2);
      wait (expq.size() == 0);
      @(posedge clk);
      load(w, b);
      run_image(w, b, ONE);
      run_image(w, b, ONE);
    end
    // saturation: large weights and pixels
    wait (expq.size() == 0);
    @(posedge clk);
    foreach (w[k]) w[k] = 32'h7fff0000;
    load(w, 32'h40000000);
    run_image(w, 32'h40000000, 0);
    // full-rate frame: cycle count and latency
    wait (expq.size() == 0);
    @(posedge clk);
    foreach (w[k]) w[k] = rnd_fx(ONE);
    b = 0;
    load(w, b);
    rand_in = 0; rand_out = 0;
    @(posedge clk);
    begin
      arr_t img, y;
      img = new[W*H];
      foreach (img[i]) img[i] = int'($urandom_range(ONE));
      y = rconvk(img, W, H, w, b, K, K_RELU);
      foreach (y[i]) expq.push_back(y[i]);
      t_in = $time;
      fork
        send(img);
        begin
          @(posedge clk iff out_valid);
          t_first = $time;
        end
      join
    end
    wait (expq.size() == 0);
    cyc = ($time - t_in) / 10;
    d = (K - 1 - PT) * (GW + 1);
    checks++;
    if ((t_first - t_in) / 10 != d + 4) begin
      failures++;
      $display("K=%0d first output after %0d cycles, expected %0d", K, (t_first - t_in) / 10, d + 4);
    end
    checks++;
    if (cyc != GW*GH - PT*(GW + 1) + 3) begin
      failures++;
      $display("K=%0d frame took %0d cycles, expected %0d", K, cyc, GW*GH - PT*(GW + 1) + 3);
    end
    if (n_sat == 0)   begin failures++; $display("K=%0d saturation never seen", K); end
    if (n_stall == 0) begin failures++; $display("K=%0d back-pressure never seen", K); end
    $display("K=%0d: saturation events %0d, output stalls %0d", K, n_sat, n_stall);
    done = 1;
  end
endmodule
