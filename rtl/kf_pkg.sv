// kf_pkg -- shared widths, fixed-point formats and types for the real-time
// Kalman-filter feedback chain that cools the z motion of a levitated
// nanoparticle.
//
// Number formats (all two's complement):
//   sample_t : ADC code, ADC_W bits, unit = one ADC step (122 uV).
//   data_t   : filter state and covariance, DATA_W bits with FRAC
//              fractional bits; position in ADC steps, covariance in
//              (ADC steps)^2.
//   coef_t   : state-transition coefficients, COEF_W bits with COEF_FRAC
//              fractional bits (range +/-2).
//   gain_t   : Kalman gain, GAIN_W bits with GAIN_FRAC fractional bits.
//   dac_t    : DAC code, DAC_W bits.
// The 14-bit ADC width follows from the 122 uV step of the converter over
// a 2 V span; the 16-bit DAC width, the internal word lengths and the
// rounding (truncation towards minus infinity after each product) are
// choices of this design. The 7-cycle iteration is the paper's figure.
package kf_pkg;

  localparam int ADC_W      = 14;
  localparam int DAC_W      = 16;
  localparam int DATA_W     = 40;
  localparam int FRAC       = 16;
  localparam int COEF_W     = 18;
  localparam int COEF_FRAC  = 16;
  localparam int GAIN_W     = 24;
  localparam int GAIN_FRAC  = 16;

  // Clock cycles per filter iteration (one ADC sample per iteration).
  localparam int CYCLES_PER_ITER = 7;

  typedef logic signed [ADC_W-1:0]  sample_t;
  typedef logic signed [DAC_W-1:0]  dac_t;
  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [GAIN_W-1:0] gain_t;

  // Sequencer of one filter iteration: seven working steps plus idle.
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,
    ST_PX    = 3'd1,  // x_pred = F x
    ST_PP1   = 3'd2,  // M = F P
    ST_PP2   = 3'd3,  // P_pred = M F^T + Q
    ST_INNOV = 3'd4,  // S = P_pred00 + R, y = z - x_pred0
    ST_GAIN  = 3'd5,  // K = P_pred(:,0) / S
    ST_UX    = 3'd6,  // x = x_pred + K y
    ST_UP    = 3'd7   // P = (I - K H) P_pred
  } kf_state_e;

  // Symmetric 2x2 covariance, stored as its three distinct entries.
  typedef struct packed {
    data_t p00;
    data_t p01;
    data_t p11;
  } cov_t;

  // Filter state vector: position z and scaled velocity u = v / omega.
  typedef struct packed {
    data_t z;
    data_t u;
  } state_t;

  // data * coefficient, rescaled back to the data format.
  function automatic data_t mul_dc(input data_t a, input coef_t b);
    logic signed [DATA_W+COEF_W-1:0] p;
    p = a * b;
    return data_t'(p >>> COEF_FRAC);
  endfunction

  // data * gain, rescaled back to the data format.
  function automatic data_t mul_dg(input data_t a, input gain_t b);
    logic signed [DATA_W+GAIN_W-1:0] p;
    p = a * b;
    return data_t'(p >>> GAIN_FRAC);
  endfunction


endpackage
