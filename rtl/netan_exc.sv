// netan_exc: excitation source of the built-in network analyzer.
//
// To measure a loop's frequency response a known sine is added to the
// setpoint of either the amplitude loop (sel = 0) or the phase loop
// (sel = 1); the response is recorded through the waveform buffer and
// analysed off-chip.  A 32-bit phase accumulator advances by 'freq' per
// cycle (f = freq/2^32 * f_clk); its top PW bits drive a rotation CORDIC
// whose input is amp/1.6468, so exc = amp*cos(phase).  exc_amp and exc_phs
// carry the sine to the selected loop and zero to the other; with en low
// the accumulator is cleared and both outputs are zero.
//
// Timing: the sine follows the phase register by the CORDIC's 20 cycles.
// The function (known excitation on either setpoint) is the paper's; the
// DDS form is this design's.
module netan_exc
  import llrf_pkg::CORDIC_ROTATE;
#(
  parameter int DW = 18,
  parameter int PW = 18,
  parameter int FW = 32
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic                 sel,
  input  logic [FW-1:0]        freq,
  input  logic [DW-2:0]        amp,
  output logic signed [DW-1:0] exc_amp,
  output logic signed [DW-1:0] exc_phs
);

  localparam int LAT = 20;
  logic [FW-1:0]          acc;
  logic signed [DW-1:0]   xin, cos_o, unused_s;
  logic signed [PW-1:0]   unused_z;
  logic [DW+15:0]         xs;
  logic [LAT-1:0]         en_p, sel_p;

  // amp / K with K = 1.6468: amp * 39797 / 2^16
  assign xs  = {16'd0, 1'b0, amp} * (DW+16)'(39797);
  assign xin = en ? DW'(xs >> 16) : '0;

  always_ff @(posedge clk) begin
    if (rst || !en) acc <= '0;
    else            acc <= acc + freq;
    if (rst) begin
      en_p <= '0; sel_p <= '0;
    end else begin
      en_p  <= {en_p[LAT-2:0], en};
      sel_p <= {sel_p[LAT-2:0], sel};
    end
  end

  cordicg_b22 #(.DW(DW), .PW(PW)) u_cordic (
    .clk(clk), .op(CORDIC_ROTATE), .xin(xin), .yin('0), .zin(acc[FW-1 -: PW]),
    .xout(cos_o), .yout(unused_s), .zout(unused_z));

  always_comb begin
    exc_amp = '0;
    exc_phs = '0;
    if (en_p[LAT-1]) begin
      if (sel_p[LAT-1]) exc_phs = cos_o;
      else              exc_amp = cos_o;
    end
  end

endmodule
