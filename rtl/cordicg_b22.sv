// cordicg_b22: pipelined CORDIC, rotation and vectoring in one datapath.
//
// Function.  op = CORDIC_VECTOR turns (xin, yin) = (I, Q) into amplitude and
// phase: xout = K*sqrt(I^2+Q^2), zout = atan2(Q, I).  op = CORDIC_ROTATE
// turns (xin, yin, zin) into the rotated vector: xout + j*yout =
// K*(xin + j*yin)*exp(j*zin).  K ~= 1.6468 is the CORDIC gain; it is not
// removed here, callers scale their inputs by 1/K where it matters.
//
// How it works.  The first stage pre-rotates by +-90 degrees so the remaining
// angle lies within +-90 degrees, then NSTG-2 shift-and-add micro-rotations
// by atan(2^-i) follow, and a last stage rounds and saturates.  Every stage
// is one register, and op travels with the data, so the operation may change
// on any cycle.  Phase is two's complement with a full turn = 2^PW; the
// datapath carries two extra integer bits and four fraction bits in x and y,
// and two fraction bits in z.
//
// Timing.  Latency is NSTG = 20 cycles (the feedback DSP figure prints
// "delay: 20 cycles" for this block), one result per cycle.
// The 20-cycle depth and the two uses (IQ->AP, AP->IQ) follow the paper;
// the widths, guard bits and the uncompensated gain are this design's.
module cordicg_b22
  import llrf_pkg::cordic_op_e, llrf_pkg::CORDIC_VECTOR;
#(
  parameter int DW   = 18,
  parameter int PW   = 18,
  parameter int NSTG = 20
) (
  input  logic                 clk,
  input  cordic_op_e           op,
  input  logic signed [DW-1:0] xin,
  input  logic signed [DW-1:0] yin,
  input  logic signed [PW-1:0] zin,
  output logic signed [DW-1:0] xout,
  output logic signed [DW-1:0] yout,
  output logic signed [PW-1:0] zout
);

  localparam int GF    = 4;           // x,y fraction guard bits
  localparam int XW    = DW + 2 + GF; // x,y: gain K*sqrt(2) < 4, plus fraction
  localparam int ZW    = PW + 2;      // z guard bits
  localparam int NITER = NSTG - 2;

  // atan(2^-i) as a fraction of a full turn, scaled by 2^32
  localparam logic [31:0] ATAN32 [24] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465, 32'd10679838, 32'd5340245, 32'd2670163, 32'd1335087,
    32'd667544, 32'd333772, 32'd166886, 32'd83443, 32'd41722, 32'd20861,
    32'd10430, 32'd5215, 32'd2608, 32'd1304, 32'd652, 32'd326, 32'd163, 32'd81};

  function automatic logic signed [ZW-1:0] atan_z(input int i);
    logic [32:0] r;
    r = ({1'b0, ATAN32[i]} + (33'd1 << (32 - ZW - 1))) >> (32 - ZW);
    return ZW'(r);
  endfunction

  localparam logic signed [ZW-1:0] QUARTER = ZW'(1) <<< (ZW - 2);   // 90 degrees

  logic signed [XW-1:0] xs [NITER+1];
  logic signed [XW-1:0] ys [NITER+1];
  logic signed [ZW-1:0] zs [NITER+1];
  cordic_op_e           ops[NITER+1];

  // stage 0: register and pre-rotate by +-90 degrees
  logic signed [XW-1:0] x0, y0;
  logic signed [ZW-1:0] z0;
  assign x0 = XW'(xin) <<< GF;
  assign y0 = XW'(yin) <<< GF;
  assign z0 = {zin, 2'b00};

  always_ff @(posedge clk) begin
    ops[0] <= op;
    if (op == CORDIC_VECTOR) begin
      if (x0 < 0 && y0 >= 0) begin          // second quadrant: rotate by -90
        xs[0] <= y0;  ys[0] <= -x0; zs[0] <= QUARTER;
      end else if (x0 < 0) begin            // third quadrant: rotate by +90
        xs[0] <= -y0; ys[0] <= x0;  zs[0] <= -QUARTER;
      end else begin
        xs[0] <= x0;  ys[0] <= y0;  zs[0] <= '0;
      end
    end else begin
      if (z0 > QUARTER) begin               // angle above +90: pre-rotate +90
        xs[0] <= -y0; ys[0] <= x0;  zs[0] <= z0 - QUARTER;
      end else if (z0 < -QUARTER) begin     // angle below -90: pre-rotate -90
        xs[0] <= y0;  ys[0] <= -x0; zs[0] <= z0 + QUARTER;
      end else begin
        xs[0] <= x0;  ys[0] <= y0;  zs[0] <= z0;
      end
    end
  end

  // micro-rotations
  for (genvar i = 0; i < NITER; i++) begin : g_stage
    localparam logic signed [ZW-1:0] A = atan_z(i);
    logic dir;   // 1: rotate clockwise (towards negative angle)
    assign dir = (ops[i] == CORDIC_VECTOR) ? (ys[i] >= 0) : (zs[i] < 0);
    always_ff @(posedge clk) begin
      ops[i+1] <= ops[i];
      if (dir) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + A;
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - A;
      end
    end
  end

  // output stage: saturate x, y to DW, round z to PW
  function automatic logic signed [DW-1:0] sat_x(input logic signed [XW-1:0] v);
    localparam logic signed [XW-GF-1:0] MAXV = (XW-GF)'((1 << (DW - 1)) - 1);
    localparam logic signed [XW-GF-1:0] MINV = -(XW-GF)'(1 << (DW - 1));
    logic signed [XW-1:0] r;
    logic signed [XW-GF-1:0] q;
    r = v + XW'(1 << (GF - 1));          // round to nearest
    q = r[XW-1:GF];
    if (q > MAXV) return DW'(MAXV);
    if (q < MINV) return DW'(MINV);
    return DW'(q);
  endfunction

  logic signed [ZW-1:0] z_rnd;
  assign z_rnd = zs[NITER] + ZW'(2);

  always_ff @(posedge clk) begin
    xout <= sat_x(xs[NITER]);
    yout <= sat_x(ys[NITER]);
    zout <= z_rnd[ZW-1:2];
  end

endmodule
