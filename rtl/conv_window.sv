// conv_window -- KxK sliding window over a raster-ordered pixel stream.
//
// A shift register of (K-1)*ROW_LEN + K words holds the last K-1 padded rows
// and K more pixels. Each shift takes pix_in as the newest pixel, so after the
// shift that brings pixel (r, c) of the padded grid, tap win[i*K + j] holds
// grid pixel (r-K+1+i, c-K+1+j): i counts kernel rows from the top, j kernel
// columns from the left, and win[K*K-1] is the newest pixel. For the network's
// 2x2 kernel this is win[0] = (r-1, c-1), win[1] = (r-1, c), win[2] = (r, c-1)
// and win[3] = (r, c), from a register of ROW_LEN+2 words.
//
// ROW_LEN is the length of one padded row (image width + K-1 for the zero
// columns of "same" padding). The window is only meaningful once K-1 rows and
// K pixels have been shifted in; the controller (conv_ctrl) decides when it
// is an output window, so the contents are not reset. Timing: the window
// changes at the clock edge on which shift is high.
//
// The paper names a windowing module feeding the MACs and a parameterised
// kernel size; the line-buffer form is this design's choice.
module conv_window
  import smallnet_pkg::*;
#(
  parameter int unsigned K       = 2,
  parameter int unsigned ROW_LEN = 29
) (
  input  logic clk,
  input  logic shift,
  input  fx_t  pix_in,
  output fx_t  win [K*K]
);

  localparam int unsigned LEN = (K-1)*ROW_LEN + K;

  // sr[0] is the newest pixel, sr[k] the pixel shifted in k shifts earlier.
  fx_t sr [LEN];

  always_ff @(posedge clk) begin
    if (shift) begin
      sr[0] <= pix_in;
      for (int unsigned k = 1; k < LEN; k++) sr[k] <= sr[k-1];
    end
  end

  for (genvar i = 0; i < K; i++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      assign win[i*K + j] = sr[(K-1-i)*ROW_LEN + (K-1-j)];
    end
  end

endmodule
