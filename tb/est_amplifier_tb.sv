// est_amplifier_tb -- checks the estimate amplifier against
// floor(z * gain / 2^24) clipped to the 16-bit DAC range, its one-cycle
// latency and its saturation flag.
module est_amplifier_tb;
  import kf_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  data_t z_est = '0;
  logic  out_valid, saturated;
  dac_t  dac_code;
  int    checks = 0, failures = 0, nsat = 0;

  est_amplifier dut (.*);
  always #5 clk = ~clk;

  function automatic longint expect_code(input longint z);
    longint v;
    v = (z * 4096) >>> 24;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  initial begin
    longint z, e;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // mostly in range, every fourth sample far outside
      if (n % 4 == 3) z = longint'($signed($urandom)) <<< 6;
      else            z = longint'($signed($urandom)) >>> 6;
      z_est = data_t'(z);
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      e = expect_code(z);
      checks++;
      if (!out_valid || longint'(dac_code) != e) begin
        failures++;
        $display("z=%0d code=%0d expected %0d valid=%0b", z, dac_code, e, out_valid);
      end
      checks++;
      if (saturated != (e == 32767 || e == -32768)) begin
        failures++; $display("saturation flag wrong for z=%0d", z);
      end
      if (saturated) nsat++;
    end
    checks++;
    if (nsat == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
