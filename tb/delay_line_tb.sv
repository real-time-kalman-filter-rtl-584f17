// delay_line_tb -- streams random words with gaps into the delay line,
// keeps its own history, and checks that each output is the input written
// `delay` samples earlier (zero before that many were written, the input
// itself for delay 0), while the delay is changed at run time.
module delay_line_tb;
  localparam int W = 34, DEPTH = 64;
  logic         clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [W-1:0] din = '0;
  logic [5:0]   delay = 6'd9;
  logic         out_valid;
  logic [W-1:0] dout;
  int checks = 0, failures = 0;

  delay_line dut (.*);
  always #5 clk = ~clk;

  logic [W-1:0] hist [$];

  initial begin
    logic [W-1:0] e;
    int n, d;
    logic [31:0] r0, r1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (n = 0; n < 2000; n++) begin
      if (n == 500)  delay = 6'd0;
      if (n == 700)  delay = 6'd63;
      if (n == 1200) delay = 6'd1;
      if (n == 1500) delay = 6'(n % 50 + 3);
      @(negedge clk);
      r0 = $urandom;
      r1 = $urandom;
      din = {r0[1:0], r1};
      in_valid = 1'b1;
      hist.push_back(din);
      @(negedge clk);
      in_valid = 1'b0;
      d = int'(delay);
      if (d > n) e = '0;
      else e = hist[n - d];
      checks++;
      if (!out_valid || dout != e) begin
        failures++;
        if (failures < 10) $display("n=%0d delay=%0d dout=%h expected %h", n, delay, dout, e);
      end
      if ($urandom_range(3) == 0) @(negedge clk);
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
