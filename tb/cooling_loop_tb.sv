// cooling_loop_tb -- closed-loop parametric feedback cooling with the whole
// chain at its default parameters and a simulated particle.
//
// Particle model (real arithmetic, in ADC steps): a damped harmonic
// oscillator at 38 kHz whose stiffness is modulated by the cooling code,
//     du = -w (1 + EPS * (cool/setpoint - 1)) z dt - GAMMA u dt + sigma dW
//     dz =  w u dt,          u = v / w,
// advanced in 8 symplectic sub-steps per 2.275 us sample, with sigma set
// for an rms motion of 6 ADC steps without feedback. The ADC sees
// 1639 + z plus +/-2 steps of noise, rounded and clipped to 14 bits.
//
// After a warm-up with the feedback off (baseline energy), the feedback is
// switched on and the delay is swept over 0..5 samples, as the delay was
// tuned by experiment. Checks: the baseline matches the model's thermal
// level; some delay cools the motion well below the baseline; some other
// delay heats it, so the effect depends on the feedback phase.
module cooling_loop_tb;
  import kf_pkg::*;

  localparam real W      = 2.0 * 3.141592653589793 * 38.0e3;
  localparam real DT     = 1.0 / 439.56e3;
  localparam int  NSUB   = 8;
  localparam real GAMMA  = 1500.0;
  localparam real ZRMS   = 6.0;
  localparam real EPS    = 0.02;
  localparam int  SETPOINT = 2000;
  localparam int  NWARM  = 14000, NSTEP = 10000, NMEAS = 5000;

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
  real z = 6.0, u = 0.0;
  bit  fb_on = 1'b0;
  real esum = 0.0;
  int  n = 0;

  // Approximately normal deviate: sum of 12 uniforms minus 6.
  function automatic real gauss();
    real g;
    g = 0.0;
    for (int i = 0; i < 12; i++) g += $itor($urandom_range(65535)) / 65536.0;
    return g - 6.0;
  endfunction

  // One sample period of the particle, then the next ADC code.
  always @(negedge clk) begin
    real h, sig, mod, v;
    int  iv, cd;
    int unsigned nz;
    if (rst_n && adc_strobe) begin
      h   = DT / NSUB;
      sig = $sqrt(2.0 * GAMMA) * ZRMS;
      cd  = int'(cool_dac);
      mod = fb_on ? EPS * ($itor(cd) / SETPOINT - 1.0) : 0.0;
      for (int i = 0; i < NSUB; i++) begin
        u = u - W * (1.0 + mod) * z * h - GAMMA * u * h + sig * $sqrt(h) * gauss();
        z = z + W * u * h;
      end
      esum += z * z + u * u;
      v  = 1639.0 + z;
      iv = $rtoi(v + 100000.5) - 100000;
      nz = $urandom_range(4);
      iv = iv + int'(nz) - 2;
      if (iv > 8191) iv = 8191;
      if (iv < -8192) iv = -8192;
      adc_sample = sample_t'(iv);
      n++;
    end
  end

  task automatic run_samples(input int count);
    int n0;
    n0 = n;
    wait (n >= n0 + count);
  endtask

  initial begin
    real base, e, emin, emax;
    int  dmin, dmax;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // warm-up with feedback off; baseline over the last NMEAS samples
    run_samples(NWARM - NMEAS);
    esum = 0.0;
    run_samples(NMEAS);
    base = esum / NMEAS / 2.0;           // mean z^2 (= mean u^2)
    $display("feedback off: <z^2> = %f steps^2 (model %f)", base, ZRMS * ZRMS);
    checks++;
    if (base < 0.5 * ZRMS * ZRMS || base > 1.5 * ZRMS * ZRMS) begin
      failures++; $display("FAIL: baseline motion off the model's thermal level");
    end
    fb_on = 1'b1;
    emin = 1.0e30; emax = 0.0; dmin = -1; dmax = -1;
    for (int d = 0; d < 6; d++) begin
      phase_delay = 6'(d);
      run_samples(NSTEP - NMEAS);
      esum = 0.0;
      run_samples(NMEAS);
      e = esum / NMEAS / 2.0;
      $display("feedback on, delay %0d samples: <z^2> = %f steps^2 (%f of baseline)", d, e, e / base);
      if (e < emin) begin emin = e; dmin = d; end
      if (e > emax) begin emax = e; dmax = d; end
    end
    checks++;
    if (emin > 0.7 * base) begin
      failures++; $display("FAIL: no delay cooled the motion below 0.7 of the baseline");
    end
    checks++;
    if (emax < 1.3 * base) begin
      failures++; $display("FAIL: no delay heated the motion: the feedback phase has no effect");
    end
    checks++;
    if (overrun) failures++;
    $display("best delay %0d (%f of baseline), worst delay %0d (%f)", dmin, emin / base, dmax, emax / base);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (700000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
