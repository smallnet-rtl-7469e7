// tb_smallnet_pl -- end-to-end test of the accelerator top at its default
// parameters (28x28 image, 32-word FIFO), acting as the processor system.
//
// The test writes all 510 parameters, then streams images back to back into
// the stream port at one word per cycle, as a DMA would, and acts as the
// processor on the interrupt side: when irq rises it waits a random time,
// reads gpio_class, compares it with the bit-exact reference of the network
// and acknowledges; one interrupt is left pending for a long time, so that
// the next class waits and the layers stall one after the other. One image
// has every pixel at the largest value so that the convolution sums
// saturate. The parameters are rewritten between two batches of images
// (6 and 17: 23 images, the size of the hardware validation set).
//
// It counts how often each mechanism of the design happened and fails if one
// never did: padding zeros injected by both convolutions, the FIFO filling
// up (s_axis_tready low), one layer stalling the one before it, the network
// held back by an unacknowledged interrupt, saturation, and interrupts taken.
module tb_smallnet_pl;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  localparam int W = 28, H = 28;
  logic clk = 0, rst_n = 0;
  logic s_axis_tvalid = 0, s_axis_tready;
  logic [31:0] s_axis_tdata = 0;
  logic wr_en = 0;
  logic [8:0] wr_addr = 0;
  fx_t  wr_data = 0, class_score;
  logic irq_ack = 0, irq, sat_event;
  logic [3:0] gpio_class;
  logic [15:0] done_count;
  logic [5:0] fifo_count;

  int checks = 0, failures = 0, n_img = 0;
  int m_pad1 = 0, m_pad2 = 0, m_fifo_full = 0, m_layer_stall = 0, m_pool1_stall = 0, m_irq_hold = 0, m_sat = 0, m_irq = 0;
  int expc[$], exps[$];
  int inq[$];
  arr_t prm = new[N_PARAMS];
  int ack_state = 0, ack_delay = 0;

  smallnet_pl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DMA: one word per cycle while words are queued
  always @(posedge clk) begin
    if (rst_n) begin
      if (s_axis_tvalid && s_axis_tready) void'(inq.pop_front());
      if (!s_axis_tvalid || s_axis_tready) begin
        if (inq.size() != 0) begin
          s_axis_tvalid <= 1'b1;
          s_axis_tdata  <= inq[0];
        end else s_axis_tvalid <= 1'b0;
      end
    end
  end

  // processor: take the interrupt, read the class, acknowledge
  always @(posedge clk) begin
    if (rst_n) begin
      case (ack_state)
        // the second interrupt is left pending long enough for the next
        // class to wait and the pipeline to back up behind it
        0: if (irq) begin ack_delay = (m_irq == 1) ? 3000 : $urandom_range(40); ack_state = 1; end
        1: if (ack_delay == 0) begin
             int c, s;
             checks++;
             c = expc.pop_front();
             s = exps.pop_front();
             if (gpio_class !== 4'(c) || class_score !== s) begin
               failures++;
               $display("image %0d: class=%0d exp=%0d score=%h exp=%h", m_irq, gpio_class, c, class_score, s);
             end
             m_irq++;
             irq_ack   <= 1'b1;
             ack_state = 2;
           end else ack_delay--;
        default: begin irq_ack <= 1'b0; ack_state = 0; end
      endcase
    end
  end

  // mechanism counters
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_net.u_conv1.shift && dut.u_net.u_conv1.pad) m_pad1++;
      if (dut.u_net.u_conv2.shift && dut.u_net.u_conv2.pad) m_pad2++;
      if (s_axis_tvalid && !s_axis_tready) m_fifo_full++;
      if ((dut.u_net.c1_v && !dut.u_net.c1_r) || (dut.u_net.p1_v && !dut.u_net.p1_r) ||
          (dut.u_net.c2_v && !dut.u_net.c2_r) || (dut.u_net.p2_v && !dut.u_net.p2_r) ||
          (dut.u_net.d_v && !dut.u_net.d_r)) m_layer_stall++;
      if (dut.u_net.p1_v && !dut.u_net.p1_r) m_pool1_stall++;
      if (dut.n_v && !dut.n_r) m_irq_hold++;
      if (sat_event) m_sat++;
    end
  end

  // pos: first-convolution weights all in [0.5, 1], so that the image of
  // largest pixels saturates its sums
  task automatic load_params(bit pos);
    foreach (prm[k]) prm[k] = (k < 10) ? rnd_fx(ONE) : rnd_fx(ONE / 2);
    if (pos) for (int k = 0; k < 4; k++) prm[k] = ONE / 2 + int'($urandom_range(ONE / 2));
    for (int a = 0; a < N_PARAMS; a++) begin
      wr_en <= 1; wr_addr <= 9'(a); wr_data <= prm[a];
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
  endtask

  task automatic queue_image(bit big);
    arr_t img;
    int c, s;
    img = new[W*H];
    foreach (img[i]) img[i] = big ? 32'h7fff0000 : int'($urandom_range(ONE));
    rnet(img, W, H, prm, K_RELU, K_SIG, c, s);
    expc.push_back(c);
    exps.push_back(s);
    foreach (img[i]) inq.push_back(img[i]);
    n_img++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_params(1);
    for (int i = 0; i < 6; i++) queue_image(i == 2);
    wait (expc.size() == 0);
    repeat (50) @(posedge clk);
    load_params(0);
    for (int i = 0; i < 17; i++) queue_image(0);
    wait (expc.size() == 0);
    repeat (50) @(posedge clk);
    checks++;
    if (done_count !== 16'(n_img) || fifo_count !== '0 || irq) begin
      failures++;
      $display("done_count=%0d exp=%0d fifo_count=%0d irq=%b", done_count, n_img, fifo_count, irq);
    end
    $display("mechanisms: pad1=%0d pad2=%0d fifo_full=%0d layer_stall=%0d pool1_stall=%0d irq_hold=%0d saturation=%0d irqs=%0d",
             m_pad1, m_pad2, m_fifo_full, m_layer_stall, m_pool1_stall, m_irq_hold, m_sat, m_irq);
    if (m_pad1 == 0)        begin failures++; $display("conv1 padding never happened"); end
    if (m_pad2 == 0)        begin failures++; $display("conv2 padding never happened"); end
    if (m_fifo_full == 0)   begin failures++; $display("FIFO never full"); end
    if (m_layer_stall == 0) begin failures++; $display("no layer stall"); end
    if (m_pool1_stall == 0) begin failures++; $display("stall never reached the first pooling layer"); end
    if (m_irq_hold == 0)    begin failures++; $display("never held by the interrupt"); end
    if (m_sat == 0)         begin failures++; $display("no saturation"); end
    if (m_irq != n_img)     begin failures++; $display("interrupts %0d, images %0d", m_irq, n_img); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
