// amplitude_control -- automatic gain control of the cooling signal.
//
// The paper keeps the cooling signal at "a set average amplitude" so that
// the cooling rate stays roughly constant when the particle's amplitude
// changes. Here a leaky integrator follows the running mean of the
// (non-negative) doubled signal, and each sample is scaled by
// setpoint / mean, so the output averages to the set point:
//     acc  <- acc + (sig * 2^AVG_SHIFT - acc) / 2^AVG_SHIFT   (mean, AVG_SHIFT frac bits)
//     code  = sat( sig * setpoint * 2^AVG_SHIFT / acc )        (acc before update)
// The divide-by-mean form, the averaging time (2^AVG_SHIFT samples) and
// saturation at the positive DAC full scale are this design's choices.
// Interface: in_valid/sig, setpoint (target mean DAC code); one cycle later
// out_valid/code. While the mean is still zero the output is zero.
// Synchronous active-low reset clears the mean.
module amplitude_control #(
  parameter int IN_W      = 34,
  parameter int OUT_W     = 16,
  parameter int AVG_SHIFT = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [IN_W-1:0]         sig,
  input  logic [OUT_W-2:0]        setpoint,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] code,
  output logic [IN_W-1:0]         mean,
  output logic                    saturated
);

  localparam int AW = IN_W + AVG_SHIFT + 1;           // mean accumulator
  localparam int NW = IN_W + OUT_W + AVG_SHIFT;       // numerator
  localparam logic [NW-1:0] CMAX = (NW'(1) << (OUT_W-1)) - 1;

  logic signed [AW-1:0] acc, acc_next;
  logic [NW-1:0]        num, quo;

  always_comb begin
    acc_next = acc + ((signed'(AW'(sig) <<< AVG_SHIFT) - acc) >>> AVG_SHIFT);
    num      = (NW'(sig) * NW'(setpoint)) << AVG_SHIFT;
    quo      = (acc > 0) ? num / NW'(unsigned'(acc)) : '0;
  end

  assign mean = IN_W'(acc >>> AVG_SHIFT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      code      <= '0;
      saturated <= 1'b0;
    end else begin
      out_valid <= in_valid;
      saturated <= 1'b0;
      if (in_valid) begin
        acc <= acc_next;
        if (quo > CMAX) begin
          code      <= OUT_W'(CMAX);
          saturated <= 1'b1;
        end else begin
          code      <= OUT_W'(quo);
        end
      end
    end
  end

endmodule
