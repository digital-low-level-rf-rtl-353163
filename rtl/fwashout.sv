// fwashout: "No-DC" filter in front of the down-converter.
//
// Removes the DC offset of the ADC stream with a first-order high-pass:
//   dc  <- dc + (x - dc) / 2^SHIFT        (leaky average, SHIFT extra bits)
//   y    = x - dc                          (saturated to W bits)
// With SHIFT = 3 the DC estimate settles to within 1e-4 of a step in about
// 70 cycles, the settling time printed for this block.  At the IF (4/11 of
// the sample rate) the response is |H| = 1.066 at +1.7 degrees, a fixed
// factor that the loop setpoints absorb.
//
// Timing: two register stages, so y follows x by 2 cycles.  The 2-cycle
// delay and 70-cycle settling follow the paper's DSP figure; the filter form
// is this design's.  Synchronous reset clears the DC estimate.
module fwashout #(
  parameter int W     = 16,
  parameter int SHIFT = 3
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout
);

  logic signed [W-1:0]         x_r;
  logic signed [W+SHIFT+1:0]   acc;      // dc * 2^SHIFT
  logic signed [W+1:0]         dc, diff;

  assign dc   = (W+2)'(acc >>> SHIFT);
  assign diff = (W+2)'(x_r) - dc;

  always_ff @(posedge clk) begin
    if (rst) begin
      x_r  <= '0;
      acc  <= '0;
      dout <= '0;
    end else begin
      x_r  <= din;
      acc  <= acc + (W+SHIFT+2)'(diff);
      if (diff > (W+2)'((1 << (W - 1)) - 1))   dout <= W'((1 << (W - 1)) - 1);
      else if (diff < -(W+2)'(1 << (W - 1)))   dout <= W'(-(1 << (W - 1)));
      else                                     dout <= W'(diff);
    end
  end

endmodule
