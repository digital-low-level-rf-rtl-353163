// digital_lo: local oscillator for the non-IQ down/up conversion.
//
// A "rotational phase" accumulator advances by exactly LO_NUM/LO_DEN of a
// turn per sample clock (4/11 for f_IF/f_S of the accumulator ring; 4/23 is
// the other ratio the system has run at).  The step is split into an integer
// part STEP = floor(NUM*2^PW/DEN) and a remainder REM that is accumulated
// modulo DEN; each time the remainder wraps, one extra LSB is added.  After
// DEN samples the phase has advanced by exactly NUM turns, so the LO has no
// long-term drift.  The phase drives a CORDIC in rotation mode whose input
// amplitude is LO_AMP/K, so lo_cos/lo_sin have amplitude LO_AMP.
//
// Timing: free running after reset; the CORDIC adds 20 cycles between the
// phase register and lo_cos/lo_sin.  The phase-accumulator-plus-CORDIC
// structure follows the paper's waveform figure; the modulo accumulator and
// LO_AMP are this design's choices.
module digital_lo
  import llrf_pkg::CORDIC_ROTATE;
#(
  parameter int DW     = 18,
  parameter int PW     = 18,
  parameter int LO_NUM = 4,
  parameter int LO_DEN = 11,
  parameter int LO_AMP = 60000
) (
  input  logic                 clk,
  input  logic                 rst,
  output logic signed [DW-1:0] lo_cos,
  output logic signed [DW-1:0] lo_sin
);

  localparam longint TURN = 64'sd1 <<< PW;
  localparam longint STEP = (LO_NUM * TURN) / longint'(LO_DEN);
  localparam longint REM  = (LO_NUM * TURN) % longint'(LO_DEN);
  // input amplitude compensating the CORDIC gain 1.64676 (LO_AMP * 10000 / 16468)
  localparam longint XAMP = (longint'(LO_AMP) * 10000 + 8234) / 16468;
  localparam int     RW   = $clog2(LO_DEN + 1);

  logic [PW-1:0] phase;
  logic [RW-1:0] res;
  logic [RW:0]   res_next;

  assign res_next = {1'b0, res} + (RW+1)'(REM);

  always_ff @(posedge clk) begin
    if (rst) begin
      phase <= '0;
      res   <= '0;
    end else if (res_next >= (RW+1)'(LO_DEN)) begin
      phase <= phase + PW'(STEP) + PW'(1);
      res   <= RW'(res_next - (RW+1)'(LO_DEN));
    end else begin
      phase <= phase + PW'(STEP);
      res   <= RW'(res_next);
    end
  end

  logic signed [PW-1:0] unused_z;

  cordicg_b22 #(.DW(DW), .PW(PW)) u_cordic (
    .clk  (clk),
    .op   (CORDIC_ROTATE),
    .xin  (DW'(XAMP)),
    .yin  ('0),
    .zin  (phase),
    .xout (lo_cos),
    .yout (lo_sin),
    .zout (unused_z)
  );

endmodule
