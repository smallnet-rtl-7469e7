// tb_max_finder -- self-checking test of the arg-max unit.
// Random score vectors, vectors of small values (many ties, where the lowest
// index must win) and vectors with negative scores; class and maximum are
// compared with the reference, with random input gaps and random output
// back-pressure.
module tb_max_finder;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  localparam int N = 10, NVEC = 500;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t  in_data [N];
  logic [3:0] out_class;
  fx_t  out_max;
  int   checks = 0, failures = 0, n_ties = 0, sent = 0;
  int   expc[$], expm[$];

  max_finder #(.N(N), .IDX_W(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // make a new vector, record what it should give, and drive it
  task automatic offer();
    arr_t v;
    int b;
    v = new[N];
    foreach (v[i]) v[i] = (sent % 3 == 0) ? int'($urandom_range(8)) :
                          (sent % 3 == 1) ? -int'($urandom_range(100000)) : int'($urandom);
    b = rargmax(v);
    foreach (v[i]) if (i != b && v[i] == v[b]) n_ties++;
    expc.push_back(b);
    expm.push_back(v[b]);
    foreach (v[i]) in_data[i] <= v[i];
    in_valid <= 1'b1;
    sent++;
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) begin
        int c, m;
        checks++;
        c = expc.pop_front();
        m = expm.pop_front();
        if (out_class !== 4'(c) || out_max !== m) begin
          failures++;
          if (failures < 10) $display("class=%0d exp=%0d max=%h exp=%h", out_class, c, out_max, m);
        end
      end
      out_ready <= ($urandom_range(2) != 0);
      if (!in_valid || in_ready) begin
        if (sent < NVEC && $urandom_range(3) != 0) offer();
        else in_valid <= 1'b0;
      end
    end
  end

  initial begin
    foreach (in_data[i]) in_data[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (sent == NVEC);
    wait (expc.size() == 0);
    checks++;
    if (n_ties == 0) begin failures++; $display("no tie exercised"); end
    $display("ties %0d", n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
