// smallnet_pkg -- types, constants and arithmetic shared by the smallNet RTL.
//
// Every value in the network (pixels, weights, biases, activations) is a
// 32-bit two's-complement fixed-point number. The word width follows the
// paper; the split into 16 integer and 16 fraction bits (Q16.16) is this
// design's choice. Products are truncated toward minus infinity (arithmetic
// shift) and every product and sum saturates to the 32-bit range instead of
// wrapping, so an overflowing sum sticks at the largest or smallest value.
//
// The package also holds the activation kinds and the flat address map used
// to load the 510 trained parameters (weights and biases) into the network.
package smallnet_pkg;

  localparam int unsigned DATA_W = 32;   // word width of every value
  localparam int unsigned FRAC_W = 16;   // fraction bits (Q16.16)

  typedef logic signed [DATA_W-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(DATA_W-1){1'b0}}});
  localparam fx_t FX_ONE = fx_t'(1 << FRAC_W);

  // Result of a saturating operation: the value and whether it was clipped.
  typedef struct packed {
    logic sat;
    fx_t  v;
  } fx_res_t;

  // Activation applied at the end of a layer.
  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,  // identity
    ACT_RELU    = 2'd1,  // max(0, x)
    ACT_SIGMOID = 2'd2   // piecewise-linear sigmoid
  } act_e;

  // Network geometry (28x28x1 input, two 2x2 convolutions each followed by
  // 2x2 max pooling, a 49-to-10 dense layer).
  localparam int unsigned NUM_CLASSES = 10;
  localparam int unsigned CLASS_W     = 4;

  // Flat weight address map: each convolution has 4 kernel taps in raster
  // order (w00, w01, w10, w11) followed by its bias; the dense layer has
  // weight (n, i) at DENSE_BASE + n*49 + i and the bias of neuron n at
  // DENSE_BASE + 490 + n.
  localparam int unsigned CONV1_BASE = 0;
  localparam int unsigned CONV2_BASE = 5;
  localparam int unsigned DENSE_BASE = 10;
  localparam int unsigned N_PARAMS   = 510;
  localparam int unsigned WADDR_W    = 9;

  // Clip a wide signed value to the fx_t range.
  function automatic fx_res_t fx_clip(input logic signed [2*DATA_W-1:0] v);
    fx_res_t r;
    if (v > 64'(FX_MAX)) begin
      r.v   = FX_MAX;
      r.sat = 1'b1;
    end else if (v < 64'(FX_MIN)) begin
      r.v   = FX_MIN;
      r.sat = 1'b1;
    end else begin
      r.v   = fx_t'(v);
      r.sat = 1'b0;
    end
    return r;
  endfunction

  // Saturating fixed-point add.
  function automatic fx_res_t fx_add(input fx_t a, input fx_t b);
    logic signed [2*DATA_W-1:0] s;
    s = 64'(a) + 64'(b);
    return fx_clip(s);
  endfunction

  // Saturating fixed-point multiply: (a*b) >>> FRAC_W, then clipped.
  function automatic fx_res_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_clip(p >>> FRAC_W);
  endfunction

  // Maximum of two signed values.
  function automatic fx_t fx_max(input fx_t a, input fx_t b);
    return (a > b) ? a : b;
  endfunction

endpackage
