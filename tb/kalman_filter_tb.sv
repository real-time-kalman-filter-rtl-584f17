// kalman_filter_tb -- self-checking test of the two-state Kalman filter.
//
// A reference model in 64-bit integers runs the same fixed-point predict /
// update equations (F x, F P F^T + Q, K = P_pred(:,0)/(P_pred00 + R),
// x + K y, P - K P_pred(0,:)) with the same truncation after every product,
// and every estimate of the filter must match it bit for bit. The test also
// checks the 7-cycle latency and the one-sample-per-7-cycles throughput,
// the overrun flag for a sample that arrives mid-iteration, and that the
// estimate of a clean 38 kHz sine converges to the true position.
module kalman_filter_tb;
  import kf_pkg::*;

  localparam longint C0 = 56103, S0 = 33873;
  localparam longint RQ11 = 6554, RR = 262144, RPI = 6553600;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    sample_valid = 1'b0;
  sample_t sample = '0;
  logic    est_valid, busy, overrun;
  state_t  est;

  int checks = 0, failures = 0;
  int cyc = 0;

  kalman_filter dut (.*);

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

  // ---------------- stimulus helpers ----------------
  int sent_cyc;

  // Present one sample for one cycle, wait for its estimate and compare.
  task automatic send_and_check(input int zin, input bit check_latency);
    @(negedge clk);
    sample_valid = 1'b1;
    sample       = sample_t'(zin);
    @(negedge clk);
    sent_cyc = cyc;
    sample_valid = 1'b0;
    model_step(longint'(zin));
    while (!est_valid) @(negedge clk);
    checks++;
    if (longint'(est.z) != mz || longint'(est.u) != mu) begin
      failures++;
      $display("MISMATCH z=%0d/%0d u=%0d/%0d", est.z, mz, est.u, mu);
    end
    if (check_latency) begin
      checks++;
      if (cyc - sent_cyc != CYCLES_PER_ITER) begin
        failures++;
        $display("LATENCY %0d cycles, expected %0d", cyc - sent_cyc, CYCLES_PER_ITER);
      end
    end
  endtask

  function automatic int noisy_sine(input int n, input real amp);
    real ph;
    ph = 0.5431819129875881 * n;
    return int'($rtoi(amp * $sin(ph) + 1000.0) - 1000) + int'($urandom_range(4)) - 2;
  endfunction

  initial begin
    int zin, first_est, ests, nerr;
    real truth, err;
    model_reset();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1) isolated samples, bit-exact and 7-cycle latency
    for (int n = 0; n < 40; n++) begin
      send_and_check(noisy_sine(n, 5.0), 1'b1);
      repeat (int'($urandom_range(3))) @(negedge clk);
    end

    // 2) back-to-back: one sample every 7 cycles, no sample lost
    @(negedge clk);
    ests = 0;
    for (int n = 0; n < 60; n++) begin
      zin = noisy_sine(n, 8.0);
      sample_valid = 1'b1;
      sample = sample_t'(zin);
      @(posedge clk);
      @(negedge clk);
      sample_valid = 1'b0;
      // the estimate of the previous sample appears on the edge that takes
      // this one, seven cycles after the previous sample was taken
      if (n > 0) begin
        checks++;
        if (!est_valid || longint'(est.z) != mz || longint'(est.u) != mu) begin
          failures++;
          $display("THROUGHPUT mismatch at n=%0d valid=%0b", n, est_valid);
        end
      end
      model_step(longint'(zin));
      repeat (CYCLES_PER_ITER - 1) @(negedge clk);
    end
    while (!est_valid) @(negedge clk);
    checks++;
    if (longint'(est.z) != mz || longint'(est.u) != mu) begin
      failures++; $display("THROUGHPUT last estimate mismatch");
    end
    repeat (10) @(negedge clk);

    // 3) overrun: a second sample three cycles into an iteration is dropped
    @(negedge clk);
    sample_valid = 1'b1; sample = sample_t'(7);
    @(negedge clk);
    sample_valid = 1'b0;
    model_step(64'sd7);
    repeat (2) @(negedge clk);
    sample_valid = 1'b1; sample = sample_t'(-3000);
    @(negedge clk);
    sample_valid = 1'b0;
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    while (!est_valid) @(negedge clk);
    checks++;
    if (longint'(est.z) != mz || longint'(est.u) != mu) begin
      failures++; $display("dropped sample disturbed the estimate");
    end
    repeat (3) @(negedge clk);

    // 4) tracking: a clean 40-step sine is followed to within 0.5 step
    nerr = 0;
    for (int n = 0; n < 300; n++) begin
      truth = 40.0 * $sin(0.5431819129875881 * (n + 1000));
      send_and_check($rtoi(truth + 1000.5) - 1000, 1'b0);
      if (n >= 200) begin
        err = $itor(est.z) / 65536.0 - truth;
        if (err > 0.5 || err < -0.5) nerr++;
      end
    end
    checks++;
    if (nerr != 0) begin failures++; $display("tracking error in %0d samples", nerr); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
