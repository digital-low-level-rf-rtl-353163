// iq_mixer: mixers of the multichannel waveform path.
//
// Every one of the N ADC channels is multiplied by the digital LO:
//   i_out[k] = adc[k]*lo_cos / 2^15,   q_out[k] = adc[k]*lo_sin / 2^15
// which moves the IF to baseband (plus a 2*IF image that the following CIC
// filters attenuate).  Timing: 2 cycles (input register, product register).
// The mixer bank follows the paper's waveform figure; scaling is this
// design's.
module iq_mixer #(
  parameter int N  = 8,
  parameter int W  = 16,
  parameter int DW = 18
) (
  input  logic                 clk,
  input  logic signed [W-1:0]  adc [N],
  input  logic signed [DW-1:0] lo_cos,
  input  logic signed [DW-1:0] lo_sin,
  output logic signed [DW-1:0] i_out [N],
  output logic signed [DW-1:0] q_out [N]
);

  logic signed [W-1:0]  a1 [N];
  logic signed [DW-1:0] c1, s1;

  always_ff @(posedge clk) begin
    a1 <= adc;
    c1 <= lo_cos;
    s1 <= lo_sin;
    for (int k = 0; k < N; k++) begin
      i_out[k] <= DW'(((W+DW)'(a1[k]) * (W+DW)'(c1)) >>> 15);
      q_out[k] <= DW'(((W+DW)'(a1[k]) * (W+DW)'(s1)) >>> 15);
    end
  end

endmodule
