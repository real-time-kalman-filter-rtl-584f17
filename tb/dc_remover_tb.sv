// dc_remover_tb -- checks the leaky-integrator DC remover sample by sample
// against an integer model of acc += (x*2^10 - acc) >>> 10, ac = x - dc,
// and checks its purpose: on a 1000-step offset plus a 50-step sine the DC
// output settles to the offset and the AC output loses it.
module dc_remover_tb;
  logic               clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [15:0] x = '0;
  logic               out_valid;
  logic signed [16:0] ac;
  logic signed [15:0] dc;
  int checks = 0, failures = 0;

  dc_remover dut (.*);
  always #5 clk = ~clk;

  longint acc = 0;

  initial begin
    longint xi, dcm, acm;
    real    acsum;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    acsum = 0.0;
    for (int n = 0; n < 12000; n++) begin
      @(negedge clk);
      xi = 1000 + longint'($rtoi(50.0 * $sin(0.5431819 * n) + 100.0)) - 100
           + longint'($urandom_range(6)) - 3;
      x = 16'(xi);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      dcm = acc >>> 10;
      acm = xi - dcm;
      acc = acc + (((xi <<< 10) - acc) >>> 10);
      checks++;
      if (!out_valid || longint'(ac) != acm || longint'(dc) != dcm) begin
        failures++;
        if (failures < 10) $display("n=%0d ac=%0d/%0d dc=%0d/%0d", n, ac, acm, dc, dcm);
      end
      if (n >= 10000) acsum += $itor(ac);
      // one idle cycle now and then: the integrator must hold
      if (n % 7 == 0) @(negedge clk);
    end
    checks++;
    if (dc < 997 || dc > 1003) begin failures++; $display("DC level %0d", dc); end
    checks++;
    if (acsum / 2000.0 > 3.0 || acsum / 2000.0 < -3.0) begin
      failures++; $display("AC mean %f", acsum / 2000.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
