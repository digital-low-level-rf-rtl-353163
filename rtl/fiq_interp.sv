// fiq_interp: I/Q demultiplexer for the interleaved down-converter output.
//
// The input stream alternates I (iq_sel = 0) and Q (iq_sel = 1).  Each
// value is held in its own register, so i_out and q_out both update every
// other cycle and are available every cycle as a parallel pair.
//
// Timing: a value entering in cycle t appears on its output in cycle t+3
// (input register, hold register, output register), the delay printed for
// this block.  The sample-and-hold form (no interpolation filter) is this
// design's choice.
module fiq_interp #(
  parameter int DW = 18
) (
  input  logic                 clk,
  input  logic signed [DW-1:0] iq,
  input  logic                 iq_sel,
  output logic signed [DW-1:0] i_out,
  output logic signed [DW-1:0] q_out
);

  logic signed [DW-1:0] d1, i_h, q_h;
  logic                 s1;

  always_ff @(posedge clk) begin
    d1 <= iq;
    s1 <= iq_sel;
    if (s1) q_h <= d1;
    else    i_h <= d1;
    i_out <= i_h;
    q_out <= q_h;
  end

endmodule
