// kalman_filter -- real-time two-state Kalman filter that tracks the z
// position of a levitated nanoparticle oscillating in a harmonic trap.
//
// Model: the state is (z, u) with u = v / omega the velocity expressed in
// position units. With the damping neglected, one sample step dt turns the
// state by the angle omega*dt:
//     [z]     [ cos(w dt)  sin(w dt)] [z]
//     [u]_t = [-sin(w dt)  cos(w dt)] [u]_t-1  + w_t,   w_t ~ N(0, Q)
// and the ADC code is the measurement  z_meas = z + v_t,  v_t ~ N(0, R).
// This is the paper's transition matrix [cos, sin/w; -w sin, cos] after
// rescaling the velocity by 1/omega, which keeps every coefficient inside
// the +/-2 range of an 18-bit multiplier operand. The defaults are for a
// 38 kHz oscillator sampled every 2.275 us (omega*dt = 0.5432 rad).
//
// Operation: every accepted sample starts one iteration of seven clock
// cycles, one step per cycle, as the paper's filter does (its clock ran at
// 3.07 MHz for 439.56 kHz sampling). The split of the work over the seven
// cycles is this design's own:
//   1 PX    x_pred = F x
//   2 PP1   M = F P
//   3 PP2   P_pred = M F^T + Q
//   4 INNOV S = P_pred00 + R ;  y = z_meas - x_pred_z
//   5 GAIN  K = P_pred(:,0) / S          (one combinational divide)
//   6 UX    x = x_pred + K y
//   7 UP    P = P_pred - K P_pred(0,:)
// The covariance is propagated at run time (full filter, not a fixed
// steady-state gain). Q and R are parameters: the paper tuned them on
// simulated data and does not print them, so the defaults are chosen here.
//
// Interface and timing: sample_valid/sample are taken on a rising edge when
// the filter is idle or in its last step; est_valid pulses for one cycle
// exactly CYCLES_PER_ITER (7) cycles later with the new estimate on est.
// A sample that arrives while an iteration is running is dropped and
// flagged on overrun. Synchronous active-low reset clears the state and loads
// P = P_INIT * I.
module kalman_filter
  import kf_pkg::*;
#(
  // cos(omega dt), sin(omega dt) in COEF format (Q2.16):
  // omega = 2 pi 38 kHz, dt = 1 / 439.56 kHz
  parameter coef_t F00    = coef_t'(56103),    //  0.85607
  parameter coef_t F01    = coef_t'(33873),    //  0.51686
  parameter coef_t F10    = coef_t'(-33873),   // -0.51686
  parameter coef_t F11    = coef_t'(56103),    //  0.85607
  // Process and measurement noise, data format (FRAC = 16), (ADC step)^2
  parameter data_t Q00    = data_t'(0),
  parameter data_t Q01    = data_t'(0),
  parameter data_t Q11    = data_t'(6554),     // 0.1
  parameter data_t R      = data_t'(262144),   // 4.0
  parameter data_t P_INIT = data_t'(6553600)   // 100.0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sample_valid,
  input  sample_t sample,
  output logic    est_valid,
  output state_t  est,          // z and u estimates, data format
  output logic    busy,
  output logic    overrun
);

  kf_state_e state;
  state_t    x, xp;
  cov_t      p, pp;
  data_t     m00, m01, m10, m11;
  data_t     s_inn, y_inn, z_meas;
  gain_t     k0, k1;
  logic      accept;

  // Gain division: the quotient is formed one bit wider than needed and
  // saturated into the gain format.
  localparam int QW = DATA_W + GAIN_FRAC;
  logic signed [QW-1:0] num0, num1, q0, q1;
  gain_t k0_next, k1_next;

  function automatic gain_t sat_gain(input logic signed [QW-1:0] v);
    localparam logic signed [QW-1:0] GMAX = (QW'(1) <<< (GAIN_W-1)) - 1;
    localparam logic signed [QW-1:0] GMIN = -(QW'(1) <<< (GAIN_W-1));
    if (v > GMAX) return gain_t'(GMAX);
    if (v < GMIN) return gain_t'(GMIN);
    return gain_t'(v);
  endfunction

  always_comb begin
    num0 = QW'(pp.p00) <<< GAIN_FRAC;
    num1 = QW'(pp.p01) <<< GAIN_FRAC;
    if (s_inn > 0) begin
      q0 = num0 / QW'(s_inn);
      q1 = num1 / QW'(s_inn);
    end else begin
      q0 = '0;
      q1 = '0;
    end
    k0_next = sat_gain(q0);
    k1_next = sat_gain(q1);
  end

  assign accept  = sample_valid && (state == ST_IDLE || state == ST_UP);
  assign busy    = (state != ST_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      x         <= '0;
      xp        <= '0;
      p.p00     <= P_INIT;
      p.p01     <= '0;
      p.p11     <= P_INIT;
      pp        <= '0;
      {m00, m01, m10, m11} <= '0;
      s_inn     <= '0;
      y_inn     <= '0;
      z_meas    <= '0;
      k0        <= '0;
      k1        <= '0;
      est_valid <= 1'b0;
      est       <= '0;
      overrun   <= 1'b0;
    end else begin
      est_valid <= 1'b0;
      overrun   <= sample_valid && !accept;
      if (accept)
        z_meas <= data_t'(sample) <<< FRAC;
      unique case (state)
        ST_IDLE:  if (accept) state <= ST_PX;
        ST_PX: begin
          xp.z  <= mul_dc(x.z, F00) + mul_dc(x.u, F01);
          xp.u  <= mul_dc(x.z, F10) + mul_dc(x.u, F11);
          state <= ST_PP1;
        end
        ST_PP1: begin
          m00   <= mul_dc(p.p00, F00) + mul_dc(p.p01, F01);
          m01   <= mul_dc(p.p01, F00) + mul_dc(p.p11, F01);
          m10   <= mul_dc(p.p00, F10) + mul_dc(p.p01, F11);
          m11   <= mul_dc(p.p01, F10) + mul_dc(p.p11, F11);
          state <= ST_PP2;
        end
        ST_PP2: begin
          pp.p00 <= mul_dc(m00, F00) + mul_dc(m01, F01) + Q00;
          pp.p01 <= mul_dc(m00, F10) + mul_dc(m01, F11) + Q01;
          pp.p11 <= mul_dc(m10, F10) + mul_dc(m11, F11) + Q11;
          state  <= ST_INNOV;
        end
        ST_INNOV: begin
          s_inn <= pp.p00 + R;
          y_inn <= z_meas - xp.z;
          state <= ST_GAIN;
        end
        ST_GAIN: begin
          k0    <= k0_next;
          k1    <= k1_next;
          state <= ST_UX;
        end
        ST_UX: begin
          x.z   <= xp.z + mul_dg(y_inn, k0);
          x.u   <= xp.u + mul_dg(y_inn, k1);
          state <= ST_UP;
        end
        ST_UP: begin
          p.p00     <= pp.p00 - mul_dg(pp.p00, k0);
          p.p01     <= pp.p01 - mul_dg(pp.p01, k0);
          p.p11     <= pp.p11 - mul_dg(pp.p01, k1);
          est_valid <= 1'b1;
          est       <= x;
          state     <= accept ? ST_PX : ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // The innovation variance must be positive when the gain is formed.
  a_s_positive: assert property (@(posedge clk) disable iff (!rst_n)
    state == ST_GAIN |-> s_inn > 0);
  // An estimate is only presented at the end of an iteration.
  a_est_end: assert property (@(posedge clk) disable iff (!rst_n)
    est_valid |-> $past(state) == ST_UP);

endmodule
