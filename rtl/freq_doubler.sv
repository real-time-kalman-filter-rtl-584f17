// freq_doubler -- squares the DC-free position estimate. For a motion
// z = A sin(wt) the square is A^2/2 (1 - cos 2wt): a component at twice the
// trap frequency, which is what parametric feedback has to drive the laser
// power with. Squaring is the paper's method; the full-precision unsigned
// result and the one-cycle register are this design's choices.
// Interface: in_valid/ac, one cycle later out_valid/sq = ac * ac.
module freq_doubler #(
  parameter int IN_W = 17
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] ac,
  output logic                   out_valid,
  output logic [2*IN_W-1:0]      sq
);

  logic signed [2*IN_W-1:0] prod;

  always_comb prod = ac * ac;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sq        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sq <= unsigned'(prod);
    end
  end

endmodule
