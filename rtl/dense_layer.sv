// dense_layer -- fully connected layer, N_IN inputs to N_OUT neurons.
//
// y[n] = act(b[n] + sum_i w[n][i] * x[i]). The flattened input arrives as a
// stream, one value per cycle, in raster order (Keras' flatten order for one
// channel). N_OUT MACs work in parallel, one per neuron: the first input
// starts each sum from the neuron's bias, the next ones add to it. After the
// last input the N_OUT sums pass through the activation into the output
// register, one cycle later, and leave together as one vector.
//
// Interface: valid/ready. in_ready is low only in the cycle (or cycles, if
// the previous vector has not been taken) in which the finished sums move to
// the output, so one image costs N_IN + 1 cycles at full rate.
// Weights: wr_addr = n*N_IN + i writes w[n][i]; wr_addr = N_IN*N_OUT + n
// writes b[n]. sat pulses one cycle after an update in which a MAC saturated.
// The layer's function and the 10 neurons are the paper's; the schedule (one
// input per cycle into parallel MACs) and the write port are this design's.
module dense_layer
  import smallnet_pkg::*;
#(
  parameter int unsigned N_IN  = 49,
  parameter int unsigned N_OUT = 10,
  parameter act_e        ACT   = ACT_SIGMOID,
  localparam int unsigned WA   = $clog2(N_IN * N_OUT + N_OUT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_data [N_OUT],
  input  logic          wr_en,
  input  logic [WA-1:0] wr_addr,
  input  fx_t           wr_data,
  output logic          sat
);

  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;

  // ---- weights ----------------------------------------------------------
  fx_t w    [N_IN][N_OUT];   // one row per input: all neurons read at once
  fx_t bias [N_OUT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int n = 0; n < N_OUT; n++) bias[n] <= '0;
    end else if (wr_en) begin
      if (int'(wr_addr) < N_IN * N_OUT)
        w[int'(wr_addr) % N_IN][int'(wr_addr) / N_IN] <= wr_data;
      else if (int'(wr_addr) < N_IN * N_OUT + N_OUT)
        bias[int'(wr_addr) - N_IN * N_OUT] <= wr_data;
    end
  end

  // ---- input sequencing -------------------------------------------------
  logic [IW-1:0] idx;     // index of the next input
  logic          fin;     // all inputs taken, sums not yet moved out
  logic          take, take_d;

  assign in_ready = !fin;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx    <= '0;
      fin    <= 1'b0;
      take_d <= 1'b0;
    end else begin
      take_d <= take;
      if (take) begin
        if (idx == IW'(N_IN - 1)) begin
          idx <= '0;
          fin <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end else if (fin && (!out_valid || out_ready)) begin
        fin <= 1'b0;
      end
    end
  end

  // ---- parallel MACs and activations ------------------------------------
  fx_t  acc      [N_OUT];
  logic lane_sat [N_OUT];
  fx_t  act_y    [N_OUT];
  logic any_sat;

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    fx_mac u_mac (
      .clk, .rst_n,
      .en    (take),
      .clr   (idx == '0),
      .a     (in_data),
      .b     (w[idx][n]),
      .addend(bias[n]),
      .acc   (acc[n]),
      .sat   (lane_sat[n])
    );
    activation #(.ACT(ACT)) u_act (.x(acc[n]), .y(act_y[n]));
  end

  always_comb begin
    any_sat = 1'b0;
    for (int n = 0; n < N_OUT; n++) any_sat |= lane_sat[n];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sat       <= 1'b0;
      for (int n = 0; n < N_OUT; n++) out_data[n] <= '0;
    end else begin
      sat <= take_d && any_sat;
      if (out_ready) out_valid <= 1'b0;
      if (fin && (!out_valid || out_ready)) begin
        out_valid <= 1'b1;
        for (int n = 0; n < N_OUT; n++) out_data[n] <= act_y[n];
      end
    end
  end

endmodule
