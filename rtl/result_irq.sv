// result_irq -- class register and completion interrupt for the processor.
//
// When the network delivers a class, it is stored for the GPIO read
// (gpio_class), together with its score (gpio_score), and the level
// interrupt irq is raised. The processor reads the
// class and writes irq_ack (a GPIO output), which lowers irq. While irq is
// high no new class is taken (res_ready low), so an unread result is never
// overwritten; the network waits. done_count counts delivered results.
//
// Timing: irq rises one cycle after the class is taken and falls one cycle
// after irq_ack. The paper raises an interrupt when processing completes and
// reads the 4-bit digit over GPIO; the level form, the acknowledge and the
// hold-off are this design's choices.
module result_irq #(
  parameter int unsigned IDX_W   = 4,
  parameter int unsigned SCORE_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             res_valid,
  output logic             res_ready,
  input  logic [IDX_W-1:0] res_class,
  input  logic [SCORE_W-1:0] res_score,
  input  logic             irq_ack,
  output logic [IDX_W-1:0] gpio_class,
  output logic [SCORE_W-1:0] gpio_score,
  output logic             irq,
  output logic [15:0]      done_count
);

  assign res_ready = !irq;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gpio_class <= '0;
      gpio_score <= '0;
      irq        <= 1'b0;
      done_count <= '0;
    end else if (res_valid && res_ready) begin
      gpio_class <= res_class;
      gpio_score <= res_score;
      irq        <= 1'b1;
      done_count <= done_count + 1'b1;
    end else if (irq_ack) begin
      irq <= 1'b0;
    end
  end

endmodule
