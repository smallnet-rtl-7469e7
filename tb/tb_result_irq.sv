// tb_result_irq -- self-checking test of the class register and interrupt.
// One clocked process offers classes at random times (holding each offer
// until it is taken) and acknowledges the interrupt after random delays,
// while a model predicts irq, gpio_class, gpio_score, done_count and res_ready; the
// outputs are compared with the model on every edge. The test also requires
// that a class was held back at least once because the interrupt was still
// pending.
module tb_result_irq;
  logic clk = 0, rst_n = 0;
  logic res_valid = 0, res_ready, irq_ack = 0, irq;
  logic [3:0] res_class = 0, gpio_class;
  logic [31:0] res_score = 0, gpio_score, m_score = 0;
  logic [15:0] done_count;
  int   checks = 0, failures = 0, n_hold = 0, n_ack = 0;
  // model
  logic m_irq = 0;
  logic [3:0] m_class = 0;
  int   m_count = 0;

  result_irq #(.IDX_W(4), .SCORE_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      // compare the outputs of the past cycle with the model
      checks++;
      if (irq !== m_irq || gpio_class !== m_class || gpio_score !== m_score || done_count !== 16'(m_count) || res_ready !== !m_irq) begin
        failures++;
        if (failures < 10) $display("irq=%b/%b class=%0d/%0d count=%0d/%0d", irq, m_irq, gpio_class, m_class, done_count, m_count);
      end
      if (res_valid && !res_ready) n_hold++;
      // model update for this edge
      if (res_valid && !m_irq) begin
        m_class = res_class;
        m_score = res_score;
        m_irq   = 1'b1;
        m_count++;
      end else if (irq_ack) begin
        m_irq = 1'b0;
        n_ack++;
      end
      // new stimulus
      if (!res_valid || res_ready) begin
        res_valid <= ($urandom_range(2) == 0);
        res_class <= 4'($urandom_range(9));
        res_score <= $urandom;
      end
      irq_ack <= irq && ($urandom_range(3) == 0);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (n_hold == 0 || n_ack == 0 || m_count == 0) begin
      failures++;
      $display("hold-offs %0d acks %0d results %0d", n_hold, n_ack, m_count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
