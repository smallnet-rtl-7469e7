// fx_mac -- saturating fixed-point multiply-accumulate unit.
//
// One multiplier and one adder with an accumulator register. When en is high
// the accumulator is updated at the clock edge: with clr it starts a new sum,
// acc = addend + a*b (the addend carries the bias, or zero); without clr it
// adds the product to the running sum, acc = acc + a*b. The product is the
// Q16.16 product (truncated) and both the product and the sum saturate to the
// 32-bit range. sat is registered with acc and tells that this update clipped.
//
// The paper uses MAC units with bias addition in its convolutional neuron and
// gives no insides; the single-register form and the bias entering as the
// start value of a sum are this design's choices. Latency: one cycle.
module fx_mac
  import smallnet_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic clr,
  input  fx_t  a,
  input  fx_t  b,
  input  fx_t  addend,
  output fx_t  acc,
  output logic sat
);

  fx_res_t prod, sum;

  always_comb begin
    prod = fx_mul(a, b);
    sum  = fx_add(clr ? addend : acc, prod.v);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
      sat <= 1'b0;
    end else if (en) begin
      acc <= sum.v;
      sat <= prod.sat | sum.sat;
    end
  end

endmodule
