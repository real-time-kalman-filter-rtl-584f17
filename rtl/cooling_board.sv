// cooling_board -- the drive board of the feedback chain: turns the
// amplified position estimate into the code that modulates the trapping
// laser power.
//
// Stages, one register each: dc_remover (leaky-integrator DC estimate,
// subtracted), freq_doubler (square: a line at twice the motion
// frequency), delay_line (phase_delay samples, sets the feedback phase),
// amplitude_control (scales the signal so its running mean equals
// amp_setpoint). The stages and their order are those of the second FPGA
// of the source experiment ("DC shifts it, frequency doubles it, applies a
// time delay and multiplies it such as to keep the amplitude approximately
// constant"); their widths, constants and forms are this design's choices.
//
// Interface: in_valid/in_code, one sample per valid; cool_valid/cool_dac
// follow 4 cycles later. dc_level is the DC level being removed and
// cool_mean the running mean inside the amplitude control.
module cooling_board
  import kf_pkg::*;
#(
  parameter int DELAY_DEPTH = 64,
  parameter int LEAK_SHIFT  = 10,
  parameter int AVG_SHIFT   = 10
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  dac_t                           in_code,
  input  logic [$clog2(DELAY_DEPTH)-1:0] phase_delay,
  input  logic [DAC_W-2:0]               amp_setpoint,
  output logic                           cool_valid,
  output dac_t                           cool_dac,
  output dac_t                           dc_level,
  output logic [2*DAC_W+1:0]             cool_mean,
  output logic                           cool_saturated
);

  localparam int SQ_W = 2 * (DAC_W + 1);

  logic                  ac_valid, sq_valid, dl_valid;
  logic signed [DAC_W:0] ac;
  logic [SQ_W-1:0]       sq, sq_del;

  dc_remover #(.IN_W(DAC_W), .LEAK_SHIFT(LEAK_SHIFT)) u_dc (
    .clk,
    .rst_n,
    .in_valid,
    .x         (in_code),
    .out_valid (ac_valid),
    .ac        (ac),
    .dc        (dc_level)
  );

  freq_doubler #(.IN_W(DAC_W + 1)) u_sq (
    .clk,
    .rst_n,
    .in_valid  (ac_valid),
    .ac        (ac),
    .out_valid (sq_valid),
    .sq        (sq)
  );

  delay_line #(.W(SQ_W), .DEPTH(DELAY_DEPTH)) u_dly (
    .clk,
    .rst_n,
    .in_valid  (sq_valid),
    .din       (sq),
    .delay     (phase_delay),
    .out_valid (dl_valid),
    .dout      (sq_del)
  );

  amplitude_control #(.IN_W(SQ_W), .OUT_W(DAC_W), .AVG_SHIFT(AVG_SHIFT)) u_agc (
    .clk,
    .rst_n,
    .in_valid  (dl_valid),
    .sig       (sq_del),
    .setpoint  (amp_setpoint),
    .out_valid (cool_valid),
    .code      (cool_dac),
    .mean      (cool_mean),
    .saturated (cool_saturated)
  );

endmodule
