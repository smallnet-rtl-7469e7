// tb_maxpool2x2 -- self-checking test of 2x2 max pooling with stride 2.
// Streams random signed maps of 6x4 with random input gaps and output
// back-pressure and compares each output with the reference pooling.
module tb_maxpool2x2;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  localparam int W = 6, H = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  in_data = 0, out_data;
  int   checks = 0, failures = 0, n_stall = 0;
  int   expq[$];

  maxpool2x2 #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  // input side: words queued in inq are offered with random gaps; a word
  // leaves the queue at the rising edge at which in_valid and in_ready are high
  int inq[$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) void'(inq.pop_front());
      if (!in_valid || in_ready) begin
        if (inq.size() != 0 && $urandom_range(3) != 0) begin
          in_valid <= 1'b1;
          in_data  <= inq[0];
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end


  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        int e;
        checks++;
        e = (expq.size() != 0) ? expq.pop_front() : 32'hdeadbeef;
        if (out_data !== e) begin
          failures++;
          if (failures < 10) $display("out=%h exp=%h", out_data, e);
        end
      end
      out_ready <= ($urandom_range(2) != 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int im = 0; im < 20; im++) begin
      arr_t img = new[W*H], y;
      foreach (img[i]) img[i] = (im % 4 == 3) ? -int'($urandom_range(1000)) : int'($urandom);
      y = rpool(img, W, H);
      foreach (y[i]) expq.push_back(y[i]);
      foreach (img[i]) inq.push_back(img[i]);
      wait (inq.size() == 0);
    end
    wait (expq.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (n_stall == 0) begin failures++; $display("back-pressure never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
