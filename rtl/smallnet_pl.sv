// smallnet_pl -- programmable-logic top of the smallNet accelerator.
//
// The processor's DMA streams one image, pixel by pixel, into s_axis_*
// (AXI4-Stream style valid/ready, one Q16.16 pixel per 32-bit word, raster
// order). The words pass through a stream FIFO into the smallNet pipeline.
// The predicted digit is held on gpio_class for the processor's GPIO and
// irq is raised (class_score is the winning class score); the processor
// answers with irq_ack through the GPIO.
//
//   DMA -> s_axis -> stream_fifo -> smallnet -> result_irq -> gpio_class, irq
//
// The DMA, interconnect, GPIO core, interrupt concatenation and processor are
// outside this design; their signals are the ports. The weights are written
// through wr_en/wr_addr/wr_data (flat addresses 0..509, see smallnet_pkg)
// before the first image. Image framing is by pixel count (IMG_W*IMG_H words
// per image); TLAST is not needed. The block structure follows the paper's
// system diagram; FIFO depth, framing and the interrupt handshake are this
// design's choices. A new image may be streamed while the previous one is
// still in the pipeline; its class is held back until irq_ack.
module smallnet_pl
  import smallnet_pkg::*;
#(
  parameter int unsigned IMG_W      = 28,
  parameter int unsigned IMG_H      = 28,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  input  logic [DATA_W-1:0]  s_axis_tdata,
  input  logic               wr_en,
  input  logic [WADDR_W-1:0] wr_addr,
  input  fx_t                wr_data,
  input  logic               irq_ack,
  output logic [CLASS_W-1:0] gpio_class,
  output logic               irq,
  output logic [15:0]        done_count,
  output logic               sat_event,
  output fx_t                class_score,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count
);

  logic               f_v, f_r;
  logic [DATA_W-1:0]  f_d;
  logic               n_v, n_r;
  logic [CLASS_W-1:0] n_class;
  fx_t                n_score;

  stream_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data(s_axis_tdata),
    .m_valid(f_v), .m_ready(f_r), .m_data(f_d),
    .count(fifo_count)
  );

  smallnet #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_net (
    .clk, .rst_n,
    .in_valid(f_v), .in_ready(f_r), .in_data(fx_t'(f_d)),
    .out_valid(n_v), .out_ready(n_r), .out_class(n_class), .out_score(n_score),
    .wr_en, .wr_addr, .wr_data,
    .sat_event
  );

  result_irq #(.IDX_W(CLASS_W), .SCORE_W(DATA_W)) u_res (
    .clk, .rst_n,
    .res_valid(n_v), .res_ready(n_r), .res_class(n_class), .res_score(n_score),
    .irq_ack, .gpio_class, .gpio_score(class_score), .irq, .done_count
  );

endmodule
