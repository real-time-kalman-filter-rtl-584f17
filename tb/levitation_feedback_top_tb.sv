// levitation_feedback_top_tb -- end-to-end test of the whole feedback chain
// at its default parameters (7 clock cycles per sample).
//
// The ADC input is a synthetic particle signal: a 1639-step DC level
// (200 mV at 122 uV per step) plus a 38 kHz sine sampled at 439.56 kHz
// plus +/-2 steps of uniform noise. The run has four segments:
//   A  amplitude 6 steps, phase_delay 0   (filter, DC removal settle)
//   B  amplitude 6 steps, phase_delay 3
//   C  amplitude 24 steps, phase_delay 3  (amplitude control must adapt)
//   D  amplitude 4000 steps, short        (the estimate amplifier clips)
// Checks, each worked out from the known input rather than from the RTL:
//   - adc_strobe comes every 7 cycles; est_valid 8 and cool_valid 12
//     cycles after the strobe of the same sample; no sample dropped;
//   - the estimate follows the sine: amplitude 16*A within 15 %, in phase,
//     and the velocity estimate v/omega is the matching cosine (25 %);
//   - the DC remover takes out the offset (its DC output settles at the
//     estimate's DC level, which is not zero);
//   - the cooling output is at twice the motion frequency (much more power
//     at 2w than at w);
//   - three samples of delay turn the cooling output phase by 3 * 2 w dt;
//   - its mean sits at the set point for both amplitudes (16x power step);
//   - every mechanism (iteration, DC removal, doubling, delay, gain
//     adaptation, output clipping) happened at least once.
module levitation_feedback_top_tb;
  import kf_pkg::*;

  localparam real TH  = 0.5431819129875881;   // omega * dt
  localparam real TWO_PI = 6.283185307179586;
  localparam int  NA = 14000, NB = 20000, NC = 30000, ND = 30400;
  localparam int  SETPOINT = 2000;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    adc_strobe;
  sample_t adc_sample = '0;
  logic [5:0]  phase_delay = '0;
  logic [14:0] amp_setpoint = 15'(SETPOINT);
  logic    est_valid, cool_valid, kf_busy, overrun, est_saturated, cool_saturated;
  dac_t    est_dac, cool_dac, dc_level;
  data_t   est_u;
  logic [33:0] cool_mean;

  levitation_feedback_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real amp_of(input int n);
    if (n < NB) return 6.0;
    if (n < NC) return 24.0;
    return 4000.0;
  endfunction

  function automatic real wrap(input real a);
    real r;
    r = a;
    while (r > TWO_PI / 2.0) r -= TWO_PI;
    while (r <= -TWO_PI / 2.0) r += TWO_PI;
    return r;
  endfunction

  // ---------------- ADC model ----------------
  int n_in = 0;
  int strobe_cyc [ND + 8];
  int last_strobe = -1, bad_period = 0;

  always @(negedge clk) begin
    real v;
    int iv;
    int unsigned noise;
    if (rst_n && adc_strobe) begin
      if (last_strobe >= 0 && cyc - last_strobe != CYCLES_PER_ITER) bad_period++;
      last_strobe = cyc;
      if (n_in < ND + 8) strobe_cyc[n_in] = cyc;
      v = 1639.0 + amp_of(n_in) * $sin(TH * n_in);
      iv = $rtoi(v + 10000.5) - 10000;
      noise = $urandom_range(4);
      adc_sample = sample_t'(iv + int'(noise) - 2);
      n_in++;
      if (n_in == NA) phase_delay = 6'd3;
    end
  end

  // ---------------- output monitors ----------------
  int  n_est = 0, n_cool = 0, bad_lat_est = 0, bad_lat_cool = 0;
  real ei_a, eq_a, ei_c, eq_c, ui_a, uq_a;     // estimate vs motion
  real c1i, c1q, c2i, c2q, csum;               // cooling output, window A
  real d2i, d2q, dsum, fsum;                   // windows B and C
  int  n_dc_seen = 0, n_sat_est = 0, n_sat_cool = 0, dc_at_c = 0;

  initial begin
    ei_a = 0; eq_a = 0; ei_c = 0; eq_c = 0; ui_a = 0; uq_a = 0;
    c1i = 0; c1q = 0; c2i = 0; c2q = 0; csum = 0;
    d2i = 0; d2q = 0; dsum = 0; fsum = 0;
  end

  always @(negedge clk) begin
    real e, c, uv;
    int ie, ic;
    longint lu;
    if (rst_n && est_valid) begin
      if (n_est < ND + 8 && cyc - strobe_cyc[n_est] != 9) bad_lat_est++;
      ie = int'(est_dac);
      e = ie;
      if (n_est >= NA - 3000 && n_est < NA) begin
        ei_a += e * $cos(TH * n_est);
        eq_a += e * $sin(TH * n_est);
        lu = longint'(est_u);
        uv = $itor(lu) / 65536.0;
        ui_a += uv * $cos(TH * n_est);
        uq_a += uv * $sin(TH * n_est);
      end
      if (n_est >= NC - 4000 && n_est < NC) begin
        ei_c += e * $cos(TH * n_est);
        eq_c += e * $sin(TH * n_est);
      end
      if (est_saturated) n_sat_est++;
      if (int'(dc_level) > 100) n_dc_seen++;
      if (n_est == NC - 1) dc_at_c = int'(dc_level);
      n_est++;
    end
    if (rst_n && cool_valid) begin
      if (n_cool < ND + 8 && cyc - strobe_cyc[n_cool] != 13) bad_lat_cool++;
      ic = int'(cool_dac);
      c = ic;
      if (n_cool >= NA - 3000 && n_cool < NA) begin
        c1i += c * $cos(TH * n_cool);       c1q += c * $sin(TH * n_cool);
        c2i += c * $cos(2.0 * TH * n_cool); c2q += c * $sin(2.0 * TH * n_cool);
        csum += c;
      end
      if (n_cool >= NB - 3000 && n_cool < NB) begin
        d2i += c * $cos(2.0 * TH * n_cool); d2q += c * $sin(2.0 * TH * n_cool);
        dsum += c;
      end
      if (n_cool >= NC - 3000 && n_cool < NC) fsum += c;
      if (cool_saturated) n_sat_cool++;
      n_cool++;
    end
  end

  // ---------------- run and judge ----------------
  initial begin
    real amp, ph, p1, p2, phA, phB, dcexp;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (n_cool >= ND);
    repeat (20) @(negedge clk);

    // timing
    check(bad_period == 0, $sformatf("%0d strobe periods differ from 7 cycles", bad_period));
    check(bad_lat_est == 0, $sformatf("%0d estimates not 8 cycles after their sample", bad_lat_est));
    check(bad_lat_cool == 0, $sformatf("%0d cooling codes not 12 cycles after their sample", bad_lat_cool));
    check(n_est >= n_in - 2, "samples lost between ADC and estimate");

    // the estimate follows the motion (gain 16 estimate amplifier)
    amp = 2.0 * $sqrt(ei_a * ei_a + eq_a * eq_a) / 3000.0;
    ph  = $atan2(eq_a, ei_a);
    $display("estimate A: amplitude %f (expect %f), phase %f", amp, 16.0 * 6.0, ph);
    check(amp > 0.85 * 96.0 && amp < 1.15 * 96.0, "estimate amplitude, segment A");
    check(ph > TWO_PI / 4.0 - 0.25 && ph < TWO_PI / 4.0 + 0.25, "estimate phase, segment A");
    // scaled velocity v/omega: a cosine of the same amplitude
    amp = 2.0 * $sqrt(ui_a * ui_a + uq_a * uq_a) / 3000.0;
    ph  = $atan2(uq_a, ui_a);
    $display("velocity A: amplitude %f (expect 6), phase %f (expect 0)", amp, ph);
    // the velocity is only observed through the position: looser bound
    check(amp > 0.75 * 6.0 && amp < 1.25 * 6.0, "velocity estimate amplitude, segment A");
    check(ph > -0.25 && ph < 0.25, "velocity estimate phase, segment A");
    amp = 2.0 * $sqrt(ei_c * ei_c + eq_c * eq_c) / 4000.0;
    $display("estimate C: amplitude %f (expect %f)", amp, 16.0 * 24.0);
    check(amp > 0.85 * 384.0 && amp < 1.15 * 384.0, "estimate amplitude, segment C");

    // DC removal: the estimate's DC level is about 0.11 * 1639 * 16
    dcexp = 0.1105 * 1639.0 * 16.0;
    $display("dc level %0d (expect about %f)", dc_at_c, dcexp);
    check(dc_at_c > 0.95 * dcexp && dc_at_c < 1.05 * dcexp, "DC level of the estimate");
    check(n_dc_seen > 0, "DC remover never saw a DC level");

    // frequency doubling
    p1 = c1i * c1i + c1q * c1q;
    p2 = c2i * c2i + c2q * c2q;
    $display("cooling output power at w %e, at 2w %e", p1, p2);
    check(p2 > 100.0 * p1, "cooling output not at twice the motion frequency");

    // phase delay of 3 samples
    phA = $atan2(c2q, c2i);
    phB = $atan2(d2q, d2i);
    $display("2w phase A %f, B %f, shift %f, expect %f", phA, phB, wrap(phB - phA), wrap(3.0 * 2.0 * TH));
    check(wrap(phB - phA - 3.0 * 2.0 * TH) < 0.3 && wrap(phB - phA - 3.0 * 2.0 * TH) > -0.3,
          "3-sample delay did not shift the cooling phase by 6 w dt");

    // amplitude control
    $display("cooling mean A %f, B %f, C %f, set point %0d", csum / 3000.0, dsum / 3000.0,
             fsum / 3000.0, SETPOINT);
    check(csum / 3000.0 > 0.9 * SETPOINT && csum / 3000.0 < 1.1 * SETPOINT, "cooling mean, segment A");
    check(fsum / 3000.0 > 0.9 * SETPOINT && fsum / 3000.0 < 1.1 * SETPOINT, "cooling mean, segment C");

    // mechanisms
    $display("mechanisms: iterations %0d, dc %0d, est clips %0d, cooling clips %0d, overrun %0d",
             n_est, n_dc_seen, n_sat_est, n_sat_cool, 0);
    check(n_est > 0, "no filter iteration");
    check(n_sat_est > 0, "estimate amplifier never clipped");
    check(n_sat_cool > 0, "amplitude control never clipped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && overrun) begin
    failures++;
    $display("FAIL: sample dropped");
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
