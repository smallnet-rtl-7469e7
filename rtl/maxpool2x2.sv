// maxpool2x2 -- 2x2 max pooling, stride 2, on a raster-ordered stream.
//
// For an IMG_W x IMG_H input it gives the (IMG_W/2) x (IMG_H/2) map of the
// maxima of non-overlapping 2x2 blocks, again in raster order. The left pixel
// of each horizontal pair is held in a register; on an even row the maximum
// of the pair is stored in a half-row buffer of IMG_W/2 words, on an odd row
// it is compared with the stored value and the result leaves as one output
// word. An odd last column or row is dropped, as Keras' default pooling does.
//
// Interface: valid/ready on both sides; in_ready = !out_valid || out_ready,
// so one input word is taken per cycle unless the output is stalled. An
// output leaves one cycle after the input that completes its block.
// The pooling function is the paper's; the buffering scheme is this design's.
module maxpool2x2
  import smallnet_pkg::*;
#(
  parameter int unsigned IMG_W = 28,
  parameter int unsigned IMG_H = 28
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fx_t  in_data,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  out_data
);

  localparam int unsigned HALF = IMG_W / 2;
  localparam int unsigned CW   = $clog2(IMG_W);
  localparam int unsigned RW   = $clog2(IMG_H);

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  fx_t           left;          // left pixel of the current pair
  fx_t           rowbuf [HALF]; // pair maxima of the last even row
  fx_t           pair_max;
  logic          take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;
  assign pair_max = fx_max(left, in_data);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      left      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (take) begin
        if (!col[0]) begin
          left <= in_data;
        end else if (!row[0]) begin
          rowbuf[col[CW-1:1]] <= pair_max;
        end else begin
          out_data  <= fx_max(rowbuf[col[CW-1:1]], pair_max);
          out_valid <= 1'b1;
        end
        if (col == CW'(IMG_W - 1)) begin
          col <= '0;
          row <= (row == RW'(IMG_H - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
