// dc_remover -- leaky integrator that follows the DC level of the position
// estimate and subtracts it, leaving only the oscillation.
//
// The paper names a leaky integrator for the DC estimate and a subtraction;
// the first-order form, its time constant (2^LEAK_SHIFT samples, about
// 2.3 ms at the 439.56 kHz sample rate) and the accumulator precision are
// this design's choices. The accumulator holds the DC level with
// LEAK_SHIFT fractional bits:
//     acc <- acc + (x * 2^LEAK_SHIFT - acc) / 2^LEAK_SHIFT
//     dc   = floor(acc / 2^LEAK_SHIFT)
//     ac   = x - dc          (dc before this sample's update)
// Interface: in_valid/x, then one cycle later out_valid with ac and dc.
// Synchronous active-low reset clears the DC level to zero.
module dc_remover #(
  parameter int IN_W       = 16,
  parameter int LEAK_SHIFT = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x,
  output logic                   out_valid,
  output logic signed [IN_W:0]   ac,
  output logic signed [IN_W-1:0] dc
);

  localparam int AW = IN_W + LEAK_SHIFT + 1;

  logic signed [AW-1:0]   acc, acc_next;
  logic signed [IN_W-1:0] dc_now;

  always_comb begin
    dc_now   = (IN_W)'(acc >>> LEAK_SHIFT);
    acc_next = acc + (((AW'(x) <<< LEAK_SHIFT) - acc) >>> LEAK_SHIFT);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      ac        <= '0;
      dc        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc <= acc_next;
        ac  <= (IN_W+1)'(x) - (IN_W+1)'(dc_now);
        dc  <= dc_now;
      end
    end
  end

endmodule
