// tb_conv_window -- self-checking test of the KxK sliding window.
// Shifts random words, with random idle cycles, into two windows with short
// rows: the network's 2x2 window (row length 5) and a 3x3 window (row length
// 6). Every tap is compared with the stream history: tap i*K + j must hold
// the word shifted in (K-1-i)*ROW_LEN + (K-1-j) shifts earlier.
module tb_conv_window;
  import smallnet_pkg::*;

  localparam int RL2 = 5, RL3 = 6;
  logic clk = 0, shift = 0;
  fx_t  pix_in = 0;
  fx_t  win2 [4];
  fx_t  win3 [9];
  int   checks = 0, failures = 0;
  int   hist[$];

  conv_window #(.K(2), .ROW_LEN(RL2)) dut2 (.clk, .shift, .pix_in, .win(win2));
  conv_window #(.K(3), .ROW_LEN(RL3)) dut3 (.clk, .shift, .pix_in, .win(win3));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      shift  <= ($urandom_range(3) != 0);
      pix_in <= int'($urandom);
      @(posedge clk);
      if (shift) hist.push_front(pix_in);
      #1;
      if (hist.size() >= RL2 + 2) begin
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++) begin
            checks++;
            if (win2[i*2+j] !== hist[(1-i)*RL2 + (1-j)]) begin
              failures++;
              if (failures < 10) $display("t=%0d 2x2 tap %0d mismatch", t, i*2+j);
            end
          end
      end
      if (hist.size() >= 2*RL3 + 3) begin
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            checks++;
            if (win3[i*3+j] !== hist[(2-i)*RL3 + (2-j)]) begin
              failures++;
              if (failures < 10) $display("t=%0d 3x3 tap %0d mismatch", t, i*3+j);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
