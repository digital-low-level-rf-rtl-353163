// flevel_set: up-conversion of the drive vector to the IF DAC sample.
//
// dac = (I*lo_cos + Q*lo_sin) / 2^SHIFT, rounded and saturated to DAC_W
// bits.  With lo_cos = L*cos(n*th), lo_sin = L*sin(n*th) this is the same
// y_n = I*cos(n*th) + Q*sin(n*th) that the down-converter inverts, so a
// direct loop-back returns the drive vector.
//
// Timing: 3 cycles from I/Q/LO to dac (input register, products, sum), the
// delay printed for this block.  Scaling and saturation are this design's.
module flevel_set #(
  parameter int DW    = 18,
  parameter int DAC_W = 16,
  parameter int SHIFT = 17
) (
  input  logic                    clk,
  input  logic signed [DW-1:0]    i_in,
  input  logic signed [DW-1:0]    q_in,
  input  logic signed [DW-1:0]    lo_cos,
  input  logic signed [DW-1:0]    lo_sin,
  output logic signed [DAC_W-1:0] dac
);

  localparam int SW = 2 * DW + 1;
  logic signed [DW-1:0]   i1, q1, c1, s1;
  logic signed [2*DW-1:0] pi2, pq2;
  logic signed [SW-1:0]   sum;

  assign sum = (SW'(pi2) + SW'(pq2) + (SW'(1) <<< (SHIFT - 1))) >>> SHIFT;

  always_ff @(posedge clk) begin
    i1 <= i_in;  q1 <= q_in;  c1 <= lo_cos;  s1 <= lo_sin;
    pi2 <= i1 * c1;
    pq2 <= q1 * s1;
    if (sum > SW'((1 << (DAC_W - 1)) - 1))  dac <= DAC_W'((1 << (DAC_W - 1)) - 1);
    else if (sum < -SW'(1 << (DAC_W - 1)))  dac <= DAC_W'(-(1 << (DAC_W - 1)));
    else                                    dac <= DAC_W'(sum);
  end

endmodule
