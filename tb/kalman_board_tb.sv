// kalman_board_tb -- checks the filter board at its default parameters.
//
// A 64-bit integer model of the Kalman iteration (same equations and
// truncations as the filter) is stepped on every strobe; each est_dac must
// equal floor(z_model * 16) clipped to 16 bits and est_u the model's scaled
// velocity. Also checked: adc_strobe every 7 cycles, est_valid 8 cycles
// after the strobe of its sample, no overrun, and clipping (with its flag)
// when a 3000-step motion overdrives the x16 amplifier.
module kalman_board_tb;
  import kf_pkg::*;

  localparam longint C0 = 56103, S0 = 33873;
  localparam longint RQ11 = 6554, RR = 262144, RPI = 6553600;
  localparam real    TH = 0.5431819129875881;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    adc_strobe;
  sample_t adc_sample = '0;
  logic    est_valid, kf_busy, overrun, est_saturated;
  dac_t    est_dac;
  data_t   est_u;

  int checks = 0, failures = 0;
  int cyc = 0;

  kalman_board dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference model ----------------
  longint mz, mu, mp00, mp01, mp11;

  function automatic longint t40(input longint v);
    data_t d;
    d = data_t'(v);
    return longint'(d);
  endfunction
  function automatic longint mdc(input longint a, input longint b);
    return t40((a * b) >>> 16);
  endfunction
  function automatic longint mdg(input longint a, input longint b);
    return t40((a * b) >>> 16);
  endfunction
  function automatic longint satg(input longint v);
    if (v > 64'sd8388607)  return 64'sd8388607;
    if (v < -64'sd8388608) return -64'sd8388608;
    return v;
  endfunction

  task automatic model_reset();
    mz = 0; mu = 0; mp00 = RPI; mp01 = 0; mp11 = RPI;
  endtask

  task automatic model_step(input longint zin);
    longint xz, xu, m00, m01, m10, m11, q00, q01, q11, s, y, k0, k1, zm;
    zm  = zin <<< 16;
    xz  = t40(mdc(mz, C0) + mdc(mu, S0));
    xu  = t40(mdc(mz, -S0) + mdc(mu, C0));
    m00 = t40(mdc(mp00, C0) + mdc(mp01, S0));
    m01 = t40(mdc(mp01, C0) + mdc(mp11, S0));
    m10 = t40(mdc(mp00, -S0) + mdc(mp01, C0));
    m11 = t40(mdc(mp01, -S0) + mdc(mp11, C0));
    q00 = t40(mdc(m00, C0) + mdc(m01, S0));
    q01 = t40(mdc(m00, -S0) + mdc(m01, C0));
    q11 = t40(mdc(m10, -S0) + mdc(m11, C0) + RQ11);
    s   = t40(q00 + RR);
    y   = t40(zm - xz);
    k0  = (s > 0) ? satg((q00 <<< 16) / s) : 0;
    k1  = (s > 0) ? satg((q01 <<< 16) / s) : 0;
    mz  = t40(xz + mdg(y, k0));
    mu  = t40(xu + mdg(y, k1));
    mp00 = t40(q00 - mdg(q00, k0));
    mp01 = t40(q01 - mdg(q01, k0));
    mp11 = t40(q11 - mdg(q01, k1));
  endtask

  // ---------------- stimulus and checks ----------------
  localparam int NS = 3000;
  int  n_in = 0, n_out = 0, last_strobe = -1, bad_period = 0, bad_lat = 0, nsat = 0;
  int  strobe_cyc [NS + 16];
  longint exp_z [NS + 16];
  longint exp_u [NS + 16];

  always @(negedge clk) begin
    real a, v;
    int iv;
    int unsigned nz;
    if (rst_n && adc_strobe && n_in < NS + 16) begin
      if (last_strobe >= 0 && cyc - last_strobe != CYCLES_PER_ITER) bad_period++;
      last_strobe = cyc;
      strobe_cyc[n_in] = cyc;
      a = (n_in < 2000) ? 7.0 : 3000.0;
      v = 400.0 + a * $sin(TH * n_in);
      iv = $rtoi(v + 10000.5) - 10000;
      nz = $urandom_range(4);
      iv = iv + int'(nz) - 2;
      adc_sample = sample_t'(iv);
      model_step(longint'(iv));
      exp_z[n_in] = mz;
      exp_u[n_in] = mu;
      n_in++;
    end
  end

  always @(negedge clk) begin
    longint e;
    if (rst_n && est_valid && n_out < NS) begin
      if (cyc - strobe_cyc[n_out] != 9) bad_lat++;
      e = (exp_z[n_out] * 16) >>> 16;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (longint'(est_dac) != e || longint'(est_u) != exp_u[n_out]
          || est_saturated != (e == 32767 || e == -32768)) begin
        failures++;
        if (failures < 10)
          $display("n=%0d est_dac=%0d expected %0d, u=%0d expected %0d", n_out, est_dac, e, est_u, exp_u[n_out]);
      end
      if (est_saturated) nsat++;
      n_out++;
    end
    if (rst_n && overrun) begin
      failures++;
      $display("sample dropped");
    end
  end

  initial begin
    model_reset();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (n_out >= NS);
    checks++;
    if (bad_period != 0) begin failures++; $display("%0d strobe periods not 7", bad_period); end
    checks++;
    if (bad_lat != 0) begin failures++; $display("%0d estimates not 8 cycles after the strobe", bad_lat); end
    checks++;
    if (nsat == 0) begin failures++; $display("amplifier never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
