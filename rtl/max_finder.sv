// max_finder -- arg-max over the N class scores ("MaxPooled 1D").
//
// Turns the vector of class scores into the number of the winning class, as a
// binary IDX_W-bit value (4 bits for the ten MNIST digits). The comparison is
// a combinational chain over the scores, signed; on equal scores the lower
// class number wins. The result and the winning score are registered.
//
// Interface: valid/ready; in_ready = !out_valid || out_ready; the class leaves
// one cycle after the scores are taken. The function is the paper's; the tie
// rule and the timing are this design's.
module max_finder
  import smallnet_pkg::*;
#(
  parameter int unsigned N     = 10,
  parameter int unsigned IDX_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  fx_t              in_data [N],
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_class,
  output fx_t              out_max
);

  logic [IDX_W-1:0] best;
  fx_t              best_v;

  always_comb begin
    best   = '0;
    best_v = in_data[0];
    for (int i = 1; i < N; i++) begin
      if (in_data[i] > best_v) begin
        best   = IDX_W'(i);
        best_v = in_data[i];
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_class <= '0;
      out_max   <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_class <= best;
        out_max   <= best_v;
      end
    end
  end

endmodule
