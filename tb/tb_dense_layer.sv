// tb_dense_layer -- self-checking test of the fully connected layer at its
// default size (49 inputs, 10 neurons, sigmoid). Writes random weights and
// biases through the write port, streams random input vectors with gaps and
// output back-pressure, and compares the ten outputs with the reference.
// Also checks that at full rate a vector takes N_IN + 1 cycles from the first
// input to the valid output, and that large values saturate.
module tb_dense_layer;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  localparam int NI = 49, NO = 10;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, wr_en = 0, sat;
  fx_t  in_data = 0, wr_data = 0;
  fx_t  out_data [NO];
  logic [8:0] wr_addr = 0;
  int   checks = 0, failures = 0, n_sat = 0, n_stall = 0;
  arr_t expq[$];
  bit   rand_io = 1;
  arr_t wt = new[NI*NO], bs = new[NO];

  dense_layer #(.N_IN(NI), .N_OUT(NO), .ACT(ACT_SIGMOID)) dut (.*);

  always #5 clk = ~clk;

  // input side: words queued in inq are offered with random gaps; a word
  // leaves the queue at the rising edge at which in_valid and in_ready are high
  int inq[$];
  longint t_take = 0;   // time of the first input taken in the timing run (0: not armed)
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) begin
        void'(inq.pop_front());
        if (t_take == 0) t_take = $time;
      end
      if (!in_valid || in_ready) begin
        if (inq.size() != 0 && (!rand_io || $urandom_range(3) != 0)) begin
          in_valid <= 1'b1;
          in_data  <= inq[0];
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end


  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (sat) n_sat++;
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        arr_t e;
        if (expq.size() == 0) begin checks++; failures++; $display("unexpected output"); end
        else begin
          e = expq.pop_front();
          for (int n = 0; n < NO; n++) begin
            checks++;
            if (out_data[n] !== e[n]) begin
              failures++;
              if (failures < 10) $display("n=%0d out=%h exp=%h", n, out_data[n], e[n]);
            end
          end
        end
      end
      out_ready <= rand_io ? ($urandom_range(2) != 0) : 1'b1;
    end
  end

  task automatic load(int range);
    foreach (wt[k]) wt[k] = rnd_fx(range);
    foreach (bs[k]) bs[k] = rnd_fx(range);
    for (int a = 0; a < NI*NO + NO; a++) begin
      wr_en <= 1; wr_addr <= 9'(a); wr_data <= (a < NI*NO) ? wt[a] : bs[a - NI*NO];
      @(posedge clk);
    end
    wr_en <= 0;
  endtask

  task automatic send(int range);
    arr_t x = new[NI];
    foreach (x[i]) x[i] = rnd_fx(range);
    expq.push_back(rdense(x, NI, NO, wt, bs, K_SIG));
    foreach (x[i]) inq.push_back(x[i]);
    wait (inq.size() == 0);
  endtask

  initial begin
    longint cyc;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load(ONE / 4);
    for (int v = 0; v < 6; v++) send(ONE);
    wait (expq.size() == 0);
    load(32'h7fffffff / 2);
    for (int v = 0; v < 2; v++) send(32'h7fffffff / 2);
    wait (expq.size() == 0);
    // full rate: N_IN takes on consecutive edges, the output register is
    // loaded on the next edge and seen high at the edge after: N_IN + 1
    // cycles from the first take
    rand_io = 0;
    @(posedge clk);
    t_take = 0;
    send(ONE);
    @(posedge clk iff out_valid);
    cyc = ($time - t_take) / 10;
    checks++;
    if (cyc != NI + 1) begin failures++; $display("vector took %0d cycles, expected %0d", cyc, NI + 1); end
    wait (expq.size() == 0);
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never seen"); end
    if (n_stall == 0) begin failures++; $display("back-pressure never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
