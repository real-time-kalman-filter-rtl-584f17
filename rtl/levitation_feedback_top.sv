// levitation_feedback_top -- the complete digital feedback chain for
// parametric cooling of the z motion of an optically levitated nanoparticle,
// from photodetector samples to the code that drives the laser-power
// modulator (AOM).
//
// Chain, one sample every SAMPLE_DIV clock cycles:
//   kalman_board:  sample timer -> kalman_filter -> est_amplifier
//   cooling_board: dc_remover -> freq_doubler -> delay_line
//                  -> amplitude_control
// The Kalman filter estimates the z position from each ADC sample in seven
// cycles; the estimate is amplified and leaves the filter board as a DAC
// code (est_dac, e.g. for an oscilloscope). The cooling board removes the
// DC level of the estimate with a leaky integrator, squares it to get a
// signal at twice the trap frequency, delays it by phase_delay samples to
// set the feedback phase, and scales it so that its running mean equals
// amp_setpoint. cool_dac is the result, for the DAC that drives the AOM.
//
// In the experiment the two boards are separate FPGAs joined by an analog
// DAC-to-ADC link; here the estimate code is passed on digitally, which
// leaves out that link's conversion noise. The ADC and DACs are off-chip:
// the sample timer's adc_strobe asks for a sample and adc_sample must hold
// it in the same cycle.
//
// Timing with the defaults (SAMPLE_DIV = 7 at 3.07 MHz gives 439.56 kHz):
// est_valid follows adc_strobe by 8 cycles, cool_valid by 12.
module levitation_feedback_top
  import kf_pkg::*;
#(
  parameter int SAMPLE_DIV  = CYCLES_PER_ITER,
  parameter int DELAY_DEPTH = 64,
  parameter int LEAK_SHIFT  = 10,
  parameter int AVG_SHIFT   = 10
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // ADC side
  output logic                           adc_strobe,
  input  sample_t                        adc_sample,
  // run-time settings of the cooling board
  input  logic [$clog2(DELAY_DEPTH)-1:0] phase_delay,
  input  logic [DAC_W-2:0]               amp_setpoint,
  // filter board output
  output logic                           est_valid,
  output dac_t                           est_dac,
  output data_t                          est_u,      // velocity / omega
  // cooling board output
  output logic                           cool_valid,
  output dac_t                           cool_dac,
  // status
  output dac_t                           dc_level,   // DC level removed
  output logic                           kf_busy,
  output logic [2*DAC_W+1:0]             cool_mean,
  output logic                           overrun,
  output logic                           est_saturated,
  output logic                           cool_saturated
);

  kalman_board #(.SAMPLE_DIV(SAMPLE_DIV)) u_filter_board (
    .clk,
    .rst_n,
    .adc_strobe,
    .adc_sample,
    .est_valid,
    .est_dac,
    .est_u,
    .kf_busy,
    .overrun,
    .est_saturated
  );

  // The analog DAC -> ADC link between the two boards is a wire here.
  cooling_board #(
    .DELAY_DEPTH (DELAY_DEPTH),
    .LEAK_SHIFT  (LEAK_SHIFT),
    .AVG_SHIFT   (AVG_SHIFT)
  ) u_cooling_board (
    .clk,
    .rst_n,
    .in_valid (est_valid),
    .in_code  (est_dac),
    .phase_delay,
    .amp_setpoint,
    .cool_valid,
    .cool_dac,
    .dc_level,
    .cool_mean,
    .cool_saturated
  );

endmodule
