// amplitude_control_tb -- checks the automatic gain control sample by
// sample against an integer model (running mean with 2^-10 leak,
// code = sig * setpoint * 2^10 / mean, clipped to 32767), and checks its
// purpose: a doubled sine whose amplitude jumps by 16x still produces an
// output whose average settles at the set point.
module amplitude_control_tb;
  logic        clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [33:0] sig = '0;
  logic [14:0] setpoint = 15'd3000;
  logic        out_valid, saturated;
  logic signed [15:0] code;
  logic [33:0] mean;
  int checks = 0, failures = 0;

  amplitude_control dut (.*);
  always #5 clk = ~clk;

  longint acc = 0;

  initial begin
    longint s, q, e;
    real amp, avg;
    int nsat;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    nsat = 0;
    for (int n = 0; n < 16000; n++) begin
      amp = (n < 8000) ? 10.0 : 160.0;
      @(negedge clk);
      s = longint'($rtoi(amp * amp * $sin(0.5431819 * n) ** 2)) + longint'($urandom_range(20));
      if (n == 100) s = 64'd3000000;      // a spike that must clip
      sig = 34'(s);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      q = (acc > 0) ? ((s * 3000) <<< 10) / acc : 0;
      e = (q > 32767) ? 32767 : q;
      acc = acc + (((s <<< 10) - acc) >>> 10);
      checks++;
      if (!out_valid || longint'(code) != e || saturated != (q > 32767)) begin
        failures++;
        if (failures < 10) $display("n=%0d code=%0d expected %0d", n, code, e);
      end
      if (saturated) nsat++;
      if (n == 7000) avg = 0.0;
      if (n == 15000) avg = 0.0;
      if ((n >= 7000 && n < 8000) || n >= 15000) avg += $itor(code);
      if (n == 7999 || n == 15999) begin
        checks++;
        avg = avg / 1000.0;
        if (avg < 2700.0 || avg > 3300.0) begin
          failures++; $display("mean output %f, set point 3000", avg);
        end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("no clipping exercised"); end
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
