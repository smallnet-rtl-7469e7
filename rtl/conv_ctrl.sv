// conv_ctrl -- control FSM of the convolutional neuron.
//
// "same" padding of a KxK kernel at stride 1 adds K-1 zero rows and columns
// around the image, PT = (K-1)/2 of them at the top and left and the rest at
// the bottom and right (the Keras convention). For the network's 2x2 kernel
// that is one zero column on the right and one zero row at the bottom. One
// image is thus walked as a padded grid of (IMG_H+K-1) rows by (IMG_W+K-1)
// columns. The FSM state is the grid position (row, col). At a real position
// it takes the next pixel from the input stream (in_ready); at a padding
// position it asks for a zero (pad) and takes nothing. Either way the window
// slides (shift). Once the window holds pixel (row, col) as its bottom-right
// corner with row >= K-1 and col >= K-1, it is the neighbourhood of output
// pixel (row-K+1, col-K+1), and win_valid says so in the cycle after the
// shift.
//
// adv is the pipeline enable from the layer: when it is low nothing moves and
// win_valid holds. At full rate one image costs (IMG_W+K-1)*(IMG_H+K-1)
// cycles and gives IMG_W*IMG_H output pixels. The paper describes an FSM that
// controls the data flow and the windowing; the padded-grid walk is this
// design's way of doing it.
module conv_ctrl #(
  parameter int unsigned IMG_W = 28,
  parameter int unsigned IMG_H = 28,
  parameter int unsigned K     = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic adv,
  input  logic in_valid,
  output logic in_ready,
  output logic pad,
  output logic shift,
  output logic win_valid
);

  localparam int unsigned GW = IMG_W + K - 1;   // padded grid width
  localparam int unsigned GH = IMG_H + K - 1;   // padded grid height
  localparam int unsigned PT = (K - 1) / 2;     // zero rows/columns before the image
  localparam int unsigned CW = $clog2(GW);
  localparam int unsigned RW = $clog2(GH);

  logic [CW-1:0] col;
  logic [RW-1:0] row;

  always_comb begin
    pad      = (int'(row) < int'(PT)) || (int'(row) >= int'(PT + IMG_H)) ||
               (int'(col) < int'(PT)) || (int'(col) >= int'(PT + IMG_W));
    shift    = adv && (pad || in_valid);
    in_ready = adv && !pad;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      win_valid <= 1'b0;
    end else begin
      if (adv) win_valid <= shift && (int'(row) >= int'(K - 1)) && (int'(col) >= int'(K - 1));
      if (shift) begin
        if (col == CW'(GW - 1)) begin
          col <= '0;
          row <= (row == RW'(GH - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
