// tb_activation -- self-checking test of the activation functions.
// Instantiates the ReLU, sigmoid and identity variants and compares them with
// the reference on the breakpoints of the piecewise-linear sigmoid, the
// extreme values and random inputs.
module tb_activation;
  import smallnet_pkg::*;
  import smallnet_ref_pkg::*;

  fx_t x, y_relu, y_sig, y_none;
  int  checks = 0, failures = 0;

  activation #(.ACT(ACT_RELU))    u_relu (.x, .y(y_relu));
  activation #(.ACT(ACT_SIGMOID)) u_sig  (.x, .y(y_sig));
  activation #(.ACT(ACT_NONE))    u_none (.x, .y(y_none));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int v);
    x = v;
    #1;
    checks++;
    if (y_relu !== ract(K_RELU, v) || y_sig !== ract(K_SIG, v) || y_none !== v) begin
      failures++;
      if (failures < 10)
        $display("x=%h relu=%h/%h sig=%h/%h none=%h", v, y_relu, ract(K_RELU, v), y_sig, ract(K_SIG, v), y_none);
    end
  endtask

  initial begin
    int edges[] = '{0, 1, -1, 65535, 65536, 65537, -65536, -65537, 155647, 155648, -155648,
                    327679, 327680, -327680, -327679, 32'h7fffffff, 32'h80000000, 32768, -32768};
    foreach (edges[i]) check(edges[i]);
    // fixed values of the sigmoid
    x = 0; #1; checks++; if (y_sig !== 32768) failures++;        // 0.5
    x = 65536; #1; checks++; if (y_sig !== 49152) failures++;    // 1/8 + 5/8 = 0.75
    x = 10 * 65536; #1; checks++; if (y_sig !== 65536) failures++;
    x = -10 * 65536; #1; checks++; if (y_sig !== 0) failures++;
    for (int t = 0; t < 2000; t++) check((t % 2) ? rnd_fx(7 * ONE) : int'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
