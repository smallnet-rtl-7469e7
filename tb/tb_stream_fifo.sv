// tb_stream_fifo -- self-checking test of the stream FIFO.
// Random pushes and pops against a queue model; checks the data order, the
// occupancy count, that s_ready falls exactly when the FIFO is full and
// m_valid exactly when it is empty, and that both conditions occur.
module tb_stream_fifo;
  localparam int WD = 32, D = 8;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [WD-1:0] s_data = 0, m_data;
  logic [$clog2(D+1)-1:0] count;
  int   checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [WD-1:0] model[$];

  stream_fifo #(.WIDTH(WD), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 4000; t++) begin
      // phases: filling, draining, mixed
      int ph = (t / 200) % 3;
      s_valid <= (ph == 0) ? ($urandom_range(3) != 0) : (ph == 1) ? ($urandom_range(3) == 0) : $urandom_range(1);
      m_ready <= (ph == 1) ? ($urandom_range(3) != 0) : (ph == 0) ? ($urandom_range(3) == 0) : ($urandom_range(1) != 0);
      s_data  <= $urandom;
      @(negedge clk);
      checks++;
      if (count !== $bits(count)'(model.size()) || s_ready !== (model.size() < D) || m_valid !== (model.size() != 0) ||
          (model.size() != 0 && m_data !== model[0])) begin
        failures++;
        if (failures < 10) $display("t=%0d count=%0d model=%0d", t, count, model.size());
      end
      if (!s_ready) n_full++;
      if (!m_valid) n_empty++;
      @(posedge clk);
      if (m_valid && m_ready) void'(model.pop_front());
      if (s_valid && s_ready) model.push_back(s_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full %0d empty %0d", n_full, n_empty); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
