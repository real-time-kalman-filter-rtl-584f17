// kalman_board -- the filter board of the feedback chain: sample timer,
// Kalman filter and output amplifier.
//
// A counter raises adc_strobe every SAMPLE_DIV clock cycles; the ADC code
// presented in that cycle is filtered by kalman_filter (seven cycles per
// iteration), and the position estimate is scaled by est_amplifier to a
// 16-bit DAC code. This matches the first of the two FPGAs of the source
// experiment, which "estimates the z position and amplifies the estimate";
// the sample timer and the flags are this design's own.
//
// Timing: with SAMPLE_DIV = 7 the filter is never idle and never drops a
// sample; est_valid/est_dac follow the strobe of the same sample by 8
// cycles. est_u is the scaled velocity estimate v/omega of the same sample,
// in the filter's data format; it changes one cycle before est_valid and
// holds until the next estimate.
module kalman_board
  import kf_pkg::*;
#(
  parameter int SAMPLE_DIV = CYCLES_PER_ITER
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    adc_strobe,
  input  sample_t adc_sample,
  output logic    est_valid,
  output dac_t    est_dac,
  output data_t   est_u,
  output logic    kf_busy,
  output logic    overrun,
  output logic    est_saturated
);

  localparam int CW = (SAMPLE_DIV > 1) ? $clog2(SAMPLE_DIV) : 1;

  logic [CW-1:0] div_cnt;
  logic          kf_valid;
  state_t        kf_est;

  always_ff @(posedge clk) begin
    if (!rst_n) div_cnt <= '0;
    else if (div_cnt == CW'(SAMPLE_DIV - 1)) div_cnt <= '0;
    else div_cnt <= div_cnt + 1'b1;
  end

  assign adc_strobe = rst_n && (div_cnt == '0);

  kalman_filter u_kf (
    .clk,
    .rst_n,
    .sample_valid (adc_strobe),
    .sample       (adc_sample),
    .est_valid    (kf_valid),
    .est          (kf_est),
    .busy         (kf_busy),
    .overrun
  );

  assign est_u = kf_est.u;

  est_amplifier u_amp (
    .clk,
    .rst_n,
    .in_valid  (kf_valid),
    .z_est     (kf_est.z),
    .out_valid (est_valid),
    .dac_code  (est_dac),
    .saturated (est_saturated)
  );

  // With the timer no faster than the filter, no sample is dropped.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    SAMPLE_DIV >= CYCLES_PER_ITER |-> !overrun);

endmodule
