// activation -- element-wise activation function of one Q16.16 value.
//
// ACT selects the function at elaboration time:
//   ACT_RELU    y = max(0, x)
//   ACT_SIGMOID piecewise-linear sigmoid (the "PLAN" approximation), built
//               from shifts and adds only. For |x|:
//                 |x| >= 5        y = 1
//                 2.375 <= |x| <5 y = |x|/32 + 0.84375
//                 1 <= |x| <2.375 y = |x|/8  + 0.625
//                 |x| < 1         y = |x|/4  + 0.5
//               and y(-x) = 1 - y(x).
//   ACT_NONE    y = x
// The paper's network uses a sigmoid in the Keras model and describes ReLU
// after the convolutional layers and a sigmoid after the dense layer in the
// hardware; how the sigmoid is approximated is this design's choice.
// Purely combinational; the layers register the result.
module activation
  import smallnet_pkg::*;
#(
  parameter act_e ACT = ACT_RELU
) (
  input  fx_t x,
  output fx_t y
);

  localparam logic [DATA_W-1:0] K_5     = 32'(5 << FRAC_W);
  localparam logic [DATA_W-1:0] K_2_375 = 32'((19 << FRAC_W) / 8);
  localparam logic [DATA_W-1:0] K_1     = 32'(1 << FRAC_W);
  localparam fx_t C_84375 = fx_t'((27 << FRAC_W) / 32);
  localparam fx_t C_625   = fx_t'((5 << FRAC_W) / 8);
  localparam fx_t C_5     = fx_t'((1 << FRAC_W) / 2);

  logic [DATA_W-1:0] ax;   // |x|, unsigned so that |FX_MIN| fits
  fx_t               sp;   // sigmoid of |x|

  always_comb begin
    ax = x[DATA_W-1] ? (~x + 1'b1) : x;
    if (ax >= K_5)          sp = FX_ONE;
    else if (ax >= K_2_375) sp = fx_t'(ax >> 5) + C_84375;
    else if (ax >= K_1)     sp = fx_t'(ax >> 3) + C_625;
    else                    sp = fx_t'(ax >> 2) + C_5;

    unique case (ACT)
      ACT_RELU:    y = x[DATA_W-1] ? '0 : x;
      ACT_SIGMOID: y = x[DATA_W-1] ? (FX_ONE - sp) : sp;
      default:     y = x;
    endcase
  end

endmodule
