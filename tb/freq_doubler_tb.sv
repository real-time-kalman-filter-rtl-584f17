// freq_doubler_tb -- checks sq = ac^2 for random and extreme inputs, the
// one-cycle latency, and that a sampled sine comes out at twice its
// frequency (twice as many crossings of its mean).
module freq_doubler_tb;
  logic               clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [16:0] ac = '0;
  logic               out_valid;
  logic [33:0]        sq;
  int checks = 0, failures = 0;

  freq_doubler dut (.*);
  always #5 clk = ~clk;

  task automatic put(input longint v);
    @(negedge clk);
    ac = 17'(v);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid || longint'(sq) != v * v) begin
      failures++; $display("ac=%0d sq=%0d", v, sq);
    end
  endtask

  initial begin
    int in_cross, out_cross;
    real prev_in, prev_out, cur, mean;
    longint v;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    put(-65536); put(65535); put(0); put(-1);
    for (int n = 0; n < 300; n++) begin
      v = longint'($urandom_range(131071));
      put(v - 65536);
    end
    // frequency check on a 38 kHz sine sampled at 439.56 kHz
    in_cross = 0; out_cross = 0;
    mean = 1000.0 * 1000.0 / 2.0;
    prev_in = 0.0; prev_out = -1.0;
    for (int n = 1; n < 1200; n++) begin
      v = longint'($rtoi(1000.0 * $sin(0.5431819129875881 * n) + 2000.5)) - 2000;
      put(v);
      cur = $itor(v);
      if ((cur >= 0.0) != (prev_in >= 0.0)) in_cross++;
      prev_in = cur;
      v = longint'(sq);
      cur = $itor(v) - mean;
      if ((cur >= 0.0) != (prev_out >= 0.0)) out_cross++;
      prev_out = cur;
    end
    checks++;
    if (out_cross < 2 * in_cross - 4 || out_cross > 2 * in_cross + 4) begin
      failures++; $display("crossings in %0d out %0d", in_cross, out_cross);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
