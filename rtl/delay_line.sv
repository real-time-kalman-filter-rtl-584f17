// delay_line -- programmable sample delay that sets the phase of the
// parametric cooling signal relative to the particle motion.
//
// The paper applies "a time delay" chosen by experiment to make up for the
// loop latency. Here the delay is counted in samples, 0 to DEPTH-1, and can
// be changed at run time on the delay input; the circular buffer, its depth
// and the sample granularity are this design's choices. At the 439.56 kHz
// rate one period of the doubled 76 kHz signal is about 5.8 samples, so
// the default depth of 64 covers many periods.
//
// Interface: on each in_valid the sample is written at the write pointer;
// one cycle later out_valid/dout carry the sample written `delay` valid
// samples before it (delay = 0 passes the current sample). Until that many
// samples have been written since reset the output is zero, so that the
// memory never has to be cleared.
module delay_line #(
  parameter int W     = 34,
  parameter int DEPTH = 64,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [W-1:0]  din,
  input  logic [AW-1:0] delay,
  output logic          out_valid,
  output logic [W-1:0]  dout
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   filled;   // samples written since reset, saturating

  always_comb rp = wp - delay;

  always_ff @(posedge clk) begin
    if (in_valid) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp        <= '0;
      filled    <= '0;
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wp <= wp + 1'b1;
        if (filled != (AW+1)'(DEPTH)) filled <= filled + 1'b1;
        if (delay == '0)
          dout <= din;
        else if ((AW+1)'(delay) > filled)
          dout <= '0;
        else
          dout <= mem[rp];
      end
    end
  end

endmodule
