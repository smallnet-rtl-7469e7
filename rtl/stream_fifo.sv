// stream_fifo -- synchronous FIFO for the input pixel stream.
//
// Buffers the words arriving from the DMA before they enter the network, so
// that the network's short stalls (padding injection, end of image) do not
// stop the transfer. A register array of DEPTH words with a read and a write
// pointer and an occupancy counter; reading is first-word-fall-through
// (m_data shows the oldest word while m_valid is high).
//
// Interface: valid/ready on both sides, s_ready = not full, m_valid = not
// empty; a word written in one cycle can be read in the next. count is the
// number of words held. The paper names a stream FIFO between the DMA and the
// network; its depth and form are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [WIDTH-1:0] s_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             wr, rd;

  assign s_ready = (count != CW'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rp];
  assign wr      = s_valid && s_ready;
  assign rd      = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= s_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(wr) - CW'(rd);
    end
  end

  // The occupancy never goes past the depth.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule
