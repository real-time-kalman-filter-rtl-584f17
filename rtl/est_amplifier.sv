// est_amplifier -- output stage of the Kalman-filter board: multiplies the
// position estimate by a fixed gain and saturates it to a DAC code.
//
// The paper says only that the filter board "amplifies the estimate" before
// sending it on; the gain value, its format (AMP_FRAC fractional bits) and
// the saturation are this design's choices.
//
// Interface: in_valid/z_est (kf_pkg data format, ADC steps with FRAC
// fractional bits). One cycle later out_valid/dac_code carry
//   dac_code = sat( z_est * AMP_GAIN / 2^(FRAC + AMP_FRAC) ),
// truncated towards minus infinity; saturated pulses for every clipped
// sample.
module est_amplifier
  import kf_pkg::*;
#(
  parameter int                 AMP_FRAC = 8,
  parameter logic signed [15:0] AMP_GAIN = 16'sd4096  // 16.0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t z_est,
  output logic  out_valid,
  output dac_t  dac_code,
  output logic  saturated
);

  localparam int PW = DATA_W + 16;
  localparam logic signed [PW-1:0] DMAX = (PW'(1) <<< (DAC_W-1)) - 1;
  localparam logic signed [PW-1:0] DMIN = -(PW'(1) <<< (DAC_W-1));

  logic signed [PW-1:0] scaled;

  always_comb scaled = (PW'(z_est) * PW'(AMP_GAIN)) >>> (FRAC + AMP_FRAC);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dac_code  <= '0;
      saturated <= 1'b0;
    end else begin
      out_valid <= in_valid;
      saturated <= 1'b0;
      if (in_valid) begin
        if (scaled > DMAX) begin
          dac_code  <= dac_t'(DMAX);
          saturated <= 1'b1;
        end else if (scaled < DMIN) begin
          dac_code  <= dac_t'(DMIN);
          saturated <= 1'b1;
        end else begin
          dac_code  <= dac_t'(scaled);
        end
      end
    end
  end

endmodule
