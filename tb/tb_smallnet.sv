// tb_smallnet -- self-checking test of the whole inference pipeline at its
// default size (28x28 input). Loads random parameters through the write port,
// streams random images with random gaps and random back-pressure on the
// class output, and compares every class and winning score with the
// bit-exact reference of the network. Also checks the steady-state rate:
// with a full input stream and no back-pressure, consecutive classes are
// (28+1)*(28+1) = 841 cycles apart, the pace of the first convolution.
// A second network, built with sigmoid convolutions as in the all-sigmoid
// Keras model, runs in lockstep on the same stream: its handshakes must match
// the first one cycle by cycle and its classes and scores its own reference.
module tb_smallnet;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  localparam int W = 28, H = 28, NIMG = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, wr_en = 0, sat_event;
  fx_t  in_data = 0, wr_data = 0, out_score;
  logic [3:0] out_class;
  logic [8:0] wr_addr = 0;
  int   checks = 0, failures = 0, n_sat = 0;
  int   expc[$], exps[$], expc_s[$], exps_s[$];
  logic in_ready_s, out_valid_s, sat_event_s;
  fx_t  out_score_s;
  logic [3:0] out_class_s;
  bit   rand_io = 1;
  int   inq[$];
  longint t_out[$];
  longint t_last_in;
  arr_t prm = new[N_PARAMS];

  smallnet dut (.*);
  smallnet #(.CONV_ACT(ACT_SIGMOID)) dut_s (
    .clk, .rst_n, .in_valid, .in_ready(in_ready_s), .in_data,
    .out_valid(out_valid_s), .out_ready, .out_class(out_class_s), .out_score(out_score_s),
    .wr_en, .wr_addr, .wr_data, .sat_event(sat_event_s)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (sat_event) n_sat++;
      if (in_valid && in_ready) begin
        void'(inq.pop_front());
        if (inq.size() == 0) t_last_in = $time;
      end
      if (!in_valid || in_ready) begin
        if (inq.size() != 0 && (!rand_io || $urandom_range(7) != 0)) begin
          in_valid <= 1'b1;
          in_data  <= inq[0];
        end else in_valid <= 1'b0;
      end
      if (in_ready_s !== in_ready || out_valid_s !== out_valid) begin
        checks++;
        failures++;
        $display("sigmoid network out of step with the ReLU network");
      end
      if (out_valid_s && out_ready) begin
        int c, s;
        checks++;
        c = expc_s.pop_front();
        s = exps_s.pop_front();
        if (out_class_s !== 4'(c) || out_score_s !== s) begin
          failures++;
          $display("sigmoid net: class=%0d exp=%0d score=%h exp=%h", out_class_s, c, out_score_s, s);
        end
      end
      if (out_valid && out_ready) begin
        int c, s;
        checks++;
        t_out.push_back($time);
        c = expc.pop_front();
        s = exps.pop_front();
        if (out_class !== 4'(c) || out_score !== s) begin
          failures++;
          $display("class=%0d exp=%0d score=%h exp=%h", out_class, c, out_score, s);
        end
      end
      out_ready <= rand_io ? ($urandom_range(3) == 0) : 1'b1;
    end
  end

  task automatic load_params();
    foreach (prm[k]) prm[k] = (k < 10) ? rnd_fx(ONE) : rnd_fx(ONE / 2);
    for (int a = 0; a < N_PARAMS; a++) begin
      wr_en <= 1; wr_addr <= 9'(a); wr_data <= prm[a];
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
  endtask

  task automatic queue_image();
    arr_t img;
    int c, s;
    img = new[W*H];
    foreach (img[i]) img[i] = int'($urandom_range(ONE));
    rnet(img, W, H, prm, K_RELU, K_SIG, c, s);
    expc.push_back(c);
    exps.push_back(s);
    rnet(img, W, H, prm, K_SIG, K_SIG, c, s);
    expc_s.push_back(c);
    exps_s.push_back(s);
    foreach (img[i]) inq.push_back(img[i]);
  endtask

  initial begin
    longint gap;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_params();
    for (int i = 0; i < NIMG; i++) queue_image();
    wait (expc.size() == 0);
    // steady-state rate
    rand_io = 0;
    load_params();
    t_out.delete();
    for (int i = 0; i < 3; i++) queue_image();
    wait (expc.size() == 0);
    for (int i = 1; i < 3; i++) begin
      gap = (t_out[i] - t_out[i-1]) / 10;
      checks++;
      if (gap != (W+1)*(H+1)) begin failures++; $display("classes %0d cycles apart, expected %0d", gap, (W+1)*(H+1)); end
    end
    $display("last pixel taken to class taken: %0d cycles", (t_out[2] - t_last_in) / 10);
    $display("saturation events %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
