// smallnet -- the smallNet inference pipeline.
//
// A 28x28 grayscale image enters as a stream of Q16.16 pixels in raster
// order; the predicted digit (0..9) leaves as a 4-bit class. The layers are
// chained as one streaming pipeline, each passing its feature map on as soon
// as it is produced:
//
//   conv 2x2 (same) -> maxpool 2x2 -> conv 2x2 (same) -> maxpool 2x2
//     28x28            14x14           14x14             7x7 = 49 values
//   -> dense 49->10 -> max finder -> class
//
// No feature map is stored whole: the convolutions keep one row plus two
// pixels, the poolings half a row. The layer sequence, the 2x2 kernels, one
// filter per convolution and the 10-neuron dense layer are the paper's. The
// convolutions use ReLU and the dense layer a sigmoid by default (CONV_ACT,
// DENSE_ACT), following the paper's hardware description.
//
// The 510 parameters are written through wr_en/wr_addr/wr_data at the flat
// addresses of smallnet_pkg (conv1 0..4, conv2 5..9, dense 10..509), before
// an image is sent. out_score is the winning class score. sat_event pulses
// when any layer saturated.
//
// Timing: at full rate the first convolution takes 29*29 = 841 cycles per
// image and sets the pace; with out_ready high the class is taken on the
// 57th clock edge after the edge that takes the last pixel of its image. The convolution layers are built
// with their default 2x2 kernel, which the address map assumes. Back-pressure on out_ready stalls the whole pipeline.
module smallnet
  import smallnet_pkg::*;
#(
  parameter int unsigned IMG_W     = 28,
  parameter int unsigned IMG_H     = 28,
  parameter act_e        CONV_ACT  = ACT_RELU,
  parameter act_e        DENSE_ACT = ACT_SIGMOID
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  fx_t                in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [CLASS_W-1:0] out_class,
  output fx_t                out_score,
  input  logic               wr_en,
  input  logic [WADDR_W-1:0] wr_addr,
  input  fx_t                wr_data,
  output logic               sat_event
);

  localparam int unsigned W2   = IMG_W / 2;
  localparam int unsigned H2   = IMG_H / 2;
  localparam int unsigned N_IN = (W2 / 2) * (H2 / 2);
  localparam int unsigned DWA  = $clog2(N_IN * NUM_CLASSES + NUM_CLASSES);

  // ---- weight address decoder -------------------------------------------
  logic           wr_c1, wr_c2, wr_d;
  logic [2:0]     a_c1, a_c2;
  logic [DWA-1:0] a_d;

  always_comb begin
    wr_c1 = wr_en && (wr_addr < WADDR_W'(CONV2_BASE));
    wr_c2 = wr_en && (wr_addr >= WADDR_W'(CONV2_BASE)) && (wr_addr < WADDR_W'(DENSE_BASE));
    wr_d  = wr_en && (wr_addr >= WADDR_W'(DENSE_BASE));
    a_c1  = 3'(wr_addr - WADDR_W'(CONV1_BASE));
    a_c2  = 3'(wr_addr - WADDR_W'(CONV2_BASE));
    a_d   = DWA'(wr_addr - WADDR_W'(DENSE_BASE));
  end

  // ---- layer chain -------------------------------------------------------
  logic c1_v, c1_r, p1_v, p1_r, c2_v, c2_r, p2_v, p2_r, d_v, d_r;
  fx_t  c1_d, p1_d, c2_d, p2_d;
  fx_t  d_d [NUM_CLASSES];
  logic sat_c1, sat_c2, sat_d;

  conv_layer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .ACT(CONV_ACT)) u_conv1 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d),
    .wr_en(wr_c1), .wr_addr(a_c1), .wr_data, .sat(sat_c1)
  );

  maxpool2x2 #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_pool1 (
    .clk, .rst_n,
    .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .out_valid(p1_v), .out_ready(p1_r), .out_data(p1_d)
  );

  conv_layer #(.IMG_W(W2), .IMG_H(H2), .ACT(CONV_ACT)) u_conv2 (
    .clk, .rst_n,
    .in_valid(p1_v), .in_ready(p1_r), .in_data(p1_d),
    .out_valid(c2_v), .out_ready(c2_r), .out_data(c2_d),
    .wr_en(wr_c2), .wr_addr(a_c2), .wr_data, .sat(sat_c2)
  );

  maxpool2x2 #(.IMG_W(W2), .IMG_H(H2)) u_pool2 (
    .clk, .rst_n,
    .in_valid(c2_v), .in_ready(c2_r), .in_data(c2_d),
    .out_valid(p2_v), .out_ready(p2_r), .out_data(p2_d)
  );

  dense_layer #(.N_IN(N_IN), .N_OUT(NUM_CLASSES), .ACT(DENSE_ACT)) u_dense (
    .clk, .rst_n,
    .in_valid(p2_v), .in_ready(p2_r), .in_data(p2_d),
    .out_valid(d_v), .out_ready(d_r), .out_data(d_d),
    .wr_en(wr_d), .wr_addr(a_d), .wr_data, .sat(sat_d)
  );

  max_finder #(.N(NUM_CLASSES), .IDX_W(CLASS_W)) u_maxf (
    .clk, .rst_n,
    .in_valid(d_v), .in_ready(d_r), .in_data(d_d),
    .out_valid, .out_ready, .out_class, .out_max(out_score)
  );

  assign sat_event = sat_c1 | sat_c2 | sat_d;

  // A class that is offered stays offered, unchanged, until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_class));

endmodule
