// cooling_board_tb -- checks the drive board at its default parameters.
//
// Input: one code every 7 cycles, a 2900-code DC level plus a 38 kHz sine
// of 96 codes, later 384 codes, with +/-3 codes of noise; the feedback
// delay is 0, then 3, then 63 samples. An integer model of the four stages
// (leak-2^-10 DC estimate, square, delay with zero fill, divide by the
// leak-2^-10 running mean times the set point, clip) predicts every output
// code exactly. Also checked: cool_valid 4 cycles after in_valid; the DC
// output settles on the input's DC level; the output is at twice the input
// frequency; a 3-sample delay turns its phase by 6 * omega * dt; its mean
// sits at the set point for both amplitudes.
module cooling_board_tb;
  import kf_pkg::*;

  localparam real TH = 0.5431819129875881;
  localparam real TWO_PI = 6.283185307179586;
  localparam int  SETPOINT = 2500;
  localparam int  NA = 16000, NB = 20000, NC = 28000, NE = 30000;

  logic        clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  dac_t        in_code = '0;
  logic [5:0]  phase_delay = '0;
  logic [14:0] amp_setpoint = 15'(SETPOINT);
  logic        cool_valid, cool_saturated;
  dac_t        cool_dac, dc_level;
  logic [33:0] cool_mean;

  cooling_board dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;

  function automatic real wrap(input real a);
    real r;
    r = a;
    while (r > TWO_PI / 2.0) r -= TWO_PI;
    while (r <= -TWO_PI / 2.0) r += TWO_PI;
    return r;
  endfunction

  // model state
  longint acc_dc = 0, acc_a = 0;
  longint hist [$];

  function automatic longint model(input longint x, input int d);
    longint dcm, ac, sq, dl, q, k;
    dcm = acc_dc >>> 10;
    ac  = x - dcm;
    acc_dc = acc_dc + (((x <<< 10) - acc_dc) >>> 10);
    sq  = ac * ac;
    k   = hist.size();
    hist.push_back(sq);
    if (d == 0) dl = sq;
    else if (d > k) dl = 0;
    else dl = hist[k - d];
    q = (acc_a > 0) ? ((dl * SETPOINT) <<< 10) / acc_a : 0;
    acc_a = acc_a + (((dl <<< 10) - acc_a) >>> 10);
    return (q > 32767) ? 32767 : q;
  endfunction

  initial begin
    real  a, v, ci, cq, c1i, c1q, pa, pb, p2, p1, sumA, sumC, c;
    int   iv, d, sent, ic, nbad, nlat;
    int unsigned nz;
    longint e;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    ci = 0; cq = 0; c1i = 0; c1q = 0; sumA = 0; sumC = 0; pa = 0; pb = 0; p2 = 0; p1 = 0;
    nbad = 0; nlat = 0;
    for (int n = 0; n < NE; n++) begin
      a = (n < NB) ? 96.0 : 384.0;
      d = (n < NA) ? 0 : ((n < NC) ? 3 : 63);
      v = 2900.0 + a * $sin(TH * n);
      iv = $rtoi(v + 10000.5) - 10000;
      nz = $urandom_range(6);
      iv = iv + int'(nz) - 3;
      @(negedge clk);
      phase_delay = 6'(d);
      in_code = dac_t'(iv);
      in_valid = 1'b1;
      sent = cyc;
      e = model(longint'(iv), d);
      @(negedge clk);
      in_valid = 1'b0;
      while (!cool_valid) @(negedge clk);
      if (cyc - sent != 4) nlat++;
      checks++;
      if (longint'(cool_dac) != e || cool_saturated != (e == 32767)) begin
        nbad++;
        if (nbad < 10) $display("n=%0d cool_dac=%0d expected %0d", n, cool_dac, e);
      end
      ic = int'(cool_dac);
      c = ic;
      if (n >= NA - 3000 && n < NA) begin
        ci += c * $cos(2.0 * TH * n); cq += c * $sin(2.0 * TH * n);
        c1i += c * $cos(TH * n);      c1q += c * $sin(TH * n);
        sumA += c;
      end
      if (n >= NB - 3000 && n < NB) begin
        pb += c * $cos(2.0 * TH * n); p2 += c * $sin(2.0 * TH * n);
      end
      if (n >= NC - 3000 && n < NC) sumC += c;
      if (n == NA - 1) begin
        checks++;
        if (dc_level < 2897 || dc_level > 2903) begin
          failures++; $display("DC level %0d, input DC 2900", dc_level);
        end
      end
      repeat (5) @(negedge clk);
    end
    failures += nbad;
    checks++;
    if (nlat != 0) begin failures++; $display("%0d outputs not 4 cycles after input", nlat); end
    p1 = c1i * c1i + c1q * c1q;
    checks++;
    if (ci * ci + cq * cq < 100.0 * p1) begin failures++; $display("output not at twice the input frequency"); end
    pa = $atan2(cq, ci);
    $display("2w phase shift %f, expected %f", wrap($atan2(p2, pb) - pa), wrap(6.0 * TH));
    checks++;
    if (wrap($atan2(p2, pb) - pa - 6.0 * TH) > 0.2 || wrap($atan2(p2, pb) - pa - 6.0 * TH) < -0.2) begin
      failures++; $display("3-sample delay: wrong phase shift");
    end
    $display("mean output %f and %f, set point %0d", sumA / 3000.0, sumC / 3000.0, SETPOINT);
    checks++;
    if (sumA / 3000.0 < 0.9 * SETPOINT || sumA / 3000.0 > 1.1 * SETPOINT) begin failures++; $display("mean A off"); end
    checks++;
    if (sumC / 3000.0 < 0.9 * SETPOINT || sumC / 3000.0 > 1.1 * SETPOINT) begin failures++; $display("mean C off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (450000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
