// tb_fx_mac -- self-checking test of the saturating multiply-accumulate unit.
// Drives random operands with random clr/en patterns, including operands
// large enough to saturate products and sums, and compares acc and sat with
// the reference arithmetic every cycle.
module tb_fx_mac;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  fx_t  a = 0, b = 0, addend = 0, acc;
  logic sat;
  int   checks = 0, failures = 0, n_sat = 0;
  int   model = 0;
  logic model_sat = 0;

  fx_mac dut (.*);

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
    if (acc !== '0) failures++;
    checks++;
    for (int t = 0; t < 3000; t++) begin
      int range;
      logic [63:0] pbig;
      range = (t % 5 == 0) ? 32'h7fffffff : 4 * ONE;
      a      <= (range == 32'h7fffffff) ? int'($urandom) : rnd_fx(range);
      b      <= (range == 32'h7fffffff) ? int'($urandom) : rnd_fx(range);
      addend <= rnd_fx(2 * ONE);
      en     <= ($urandom_range(3) != 0);
      clr    <= ($urandom_range(4) == 0);
      @(posedge clk);
      // model of the update that happens on this edge
      if (en) begin
        longint p, s;
        p = (longint'(a) * longint'(b)) >>> 16;
        s = longint'(clr ? addend : model) + longint'(sat32(p));
        model_sat = (sat32(p) != p) || (sat32(s) != s);
        model     = sat32(s);
      end
      #1;
      checks++;
      if (acc !== model || sat !== model_sat) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d acc=%h exp=%h sat=%b exp=%b", t, acc, model, sat, model_sat);
      end
      if (sat) n_sat++;
    end
    if (n_sat == 0) begin failures++; $display("no saturation exercised"); end
    $display("saturating updates: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
