// conv_layer -- convolutional neuron: one KxK filter, stride 1, "same" padding.
//
// Computes out(r, c) = act(b + sum_{i,j < K} w[i][j] * x(r-PT+i, c-PT+j)) for
// an IMG_W x IMG_H image streamed in raster order, with PT = (K-1)/2 and x
// zero outside the image. For the network's 2x2 kernel (PT = 0) that is
// b + w00*x(r,c) + w01*x(r,c+1) + w10*x(r+1,c) + w11*x(r+1,c+1). Its parts
// follow the paper's convolutional neuron: a control FSM (conv_ctrl) that
// walks the padded grid and injects the padding zeros, a window
// (conv_window), K*K MACs in parallel (one per kernel tap, the first one
// starting from the bias), a saturating adder tree over the K*K lanes, and
// the activation. The paper asks for parameterised input sizes and kernel
// sizes; IMG_W, IMG_H and K give them. One filter, hence one output channel.
//
// Pipeline: window register -> MAC registers -> sum+activation register.
// Every stage moves when adv = !out_valid || out_ready, so back-pressure on
// the output stalls the whole layer. An output pixel is valid two clock edges
// after the edge that shifts in the pixel completing its window (padding
// zeros are injected without input). Throughput: one grid position per
// cycle, (IMG_W+K-1)*(IMG_H+K-1) cycles per image.
//
// Adder tree: the lanes are padded with zeros to a power of two and added
// pairwise, level by level, with saturation at every adder; for K = 2 that is
// (lane0 + lane1) + (lane2 + lane3). The order matters only when a partial
// sum saturates.
//
// Weights: wr_addr 0..K*K-1 write the taps in raster order (w00, w01, ...),
// address K*K writes the bias. The paper hardcodes trained weights; the
// write port is this design's way of getting them in. sat pulses when a
// product or a sum of an output pixel saturated.
module conv_layer
  import smallnet_pkg::*;
#(
  parameter int unsigned IMG_W = 28,
  parameter int unsigned IMG_H = 28,
  parameter int unsigned K     = 2,
  parameter act_e        ACT   = ACT_RELU,
  localparam int unsigned N    = K * K,
  localparam int unsigned AW   = $clog2(N + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  fx_t        in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output fx_t        out_data,
  input  logic       wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fx_t        wr_data,
  output logic       sat
);

  // ---- weights and bias -------------------------------------------------
  fx_t w [N];
  fx_t bias;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) w[k] <= '0;
      bias <= '0;
    end else if (wr_en) begin
      for (int k = 0; k < N; k++)
        if (wr_addr == AW'(k)) w[k] <= wr_data;
      if (wr_addr == AW'(N)) bias <= wr_data;
    end
  end

  // ---- control and window ------------------------------------------------
  logic adv, pad, shift, win_valid;
  fx_t  win [N];

  assign adv = !out_valid || out_ready;

  conv_ctrl #(.IMG_W(IMG_W), .IMG_H(IMG_H), .K(K)) u_ctrl (
    .clk, .rst_n, .adv, .in_valid, .in_ready, .pad, .shift, .win_valid
  );

  conv_window #(.K(K), .ROW_LEN(IMG_W + K - 1)) u_win (
    .clk, .shift, .pix_in(pad ? fx_t'(0) : in_data), .win
  );

  // ---- parallel MACs ----------------------------------------------------
  fx_t  lane_acc [N];
  logic lane_sat [N];
  logic mac_valid;

  for (genvar k = 0; k < N; k++) begin : g_mac
    fx_mac u_mac (
      .clk, .rst_n,
      .en    (adv),
      .clr   (1'b1),
      .a     (win[k]),
      .b     (w[k]),
      .addend(k == 0 ? bias : fx_t'(0)),
      .acc   (lane_acc[k]),
      .sat   (lane_sat[k])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n)   mac_valid <= 1'b0;
    else if (adv) mac_valid <= win_valid;
  end

  // ---- sum and activation -----------------------------------------------
  localparam int unsigned LV = (N > 1) ? $clog2(N) : 1;   // tree levels
  localparam int unsigned NT = 1 << LV;                   // lanes, padded

  fx_t     lvl [NT];
  fx_res_t r;
  fx_t     act_y;
  logic    any_sat;

  always_comb begin
    any_sat = 1'b0;
    for (int k = 0; k < NT; k++) begin
      lvl[k] = (k < N) ? lane_acc[k] : '0;
      if (k < N) any_sat |= lane_sat[k];
    end
    r = '{sat: 1'b0, v: lvl[0]};
    // in place: level l turns NT >> l partial sums into NT >> (l+1)
    for (int l = 0; l < LV; l++) begin
      for (int k = 0; k < (NT >> (l + 1)); k++) begin
        r       = fx_add(lvl[2*k], lvl[2*k+1]);
        lvl[k]  = r.v;
        any_sat |= r.sat;
      end
    end
  end

  activation #(.ACT(ACT)) u_act (.x(lvl[0]), .y(act_y));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      sat       <= 1'b0;
    end else begin
      sat <= adv && mac_valid && any_sat;
      if (adv) begin
        out_valid <= mac_valid;
        out_data  <= act_y;
      end
    end
  end

endmodule
