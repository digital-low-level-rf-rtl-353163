// pi_scalar: scalar PI controller of one feedback loop (amplitude or phase).
//
// Datapath, in the order of the paper's PI figure:
//   e    = setpoint - measured                   (stage 1)
//          wrapped modulo 2^DW when wrap_en (phase loop: -180 deg = +180 deg),
//          otherwise saturated to DW bits
//   el   = slew-rate limited e: el moves towards e by at most slew_max
//          per cycle                               (stage 2)
//   p    = el*kp / 2^P_SHIFT,  acc += el*ki        (stage 3)
//   drive = close_loop ? p + acc/2^I_SHIFT : setpoint   (stage 4)
// which realises C(z) = Kp + Ki/(1 - z^-1).  The integrator saturates at
// full scale (with wrap_en it and the drive wrap modulo 2^DW instead, so a
// phase drive can turn through any number of periods) and is cleared
// while the loop is open, so closing the loop
// starts from zero integral.  In open loop the setpoint is passed to the
// drive, as the figure's setpoint path to the "close loop?" select shows.
//
// Timing: drive responds to measured 4 cycles later (the printed delay).
// The structure follows the paper; the fixed-point formats, the limiter's
// form and the integrator clearing are this design's choices.
module pi_scalar #(
  parameter int DW      = 18,
  parameter int KW      = 18,
  parameter int P_SHIFT = 10,
  parameter int I_SHIFT = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [DW-1:0] setpoint,
  input  logic signed [DW-1:0] measured,
  input  logic signed [KW-1:0] kp,
  input  logic signed [KW-1:0] ki,
  input  logic        [DW-2:0] slew_max,
  input  logic                 wrap_en,
  input  logic                 close_loop,
  output logic signed [DW-1:0] drive
);

  localparam int  AW   = DW + I_SHIFT + 1;                  // integrator
  localparam longint MAXD = (64'sd1 <<< (DW - 1)) - 1;
  localparam longint MAXA = (MAXD <<< I_SHIFT);

  logic signed [DW:0]      diff;
  logic signed [DW-1:0]    e1, el;
  logic signed [DW+1:0]    step;
  logic signed [DW+1:0]    lim;
  logic signed [DW+KW-1:0] pp, ip;
  logic signed [DW-1:0]    p3;
  logic signed [AW-1:0]    acc;
  logic signed [AW:0]      acc_n;
  logic signed [DW+1:0]    sum;
  logic signed [DW-1:0]    sp1, sp2, sp3;
  logic                    cl1, cl2, cl3;

  assign diff = (DW+1)'(setpoint) - (DW+1)'(measured);
  assign step = (DW+2)'(e1) - (DW+2)'(el);
  assign lim  = (DW+2)'({1'b0, slew_max});
  assign pp   = el * kp;
  assign ip   = el * ki;
  assign acc_n = (AW+1)'(acc) + (AW+1)'(ip);
  assign sum  = (DW+2)'(p3) + (DW+2)'(acc >>> I_SHIFT);

  always_ff @(posedge clk) begin
    if (rst) begin
      e1 <= '0; el <= '0; p3 <= '0; acc <= '0; drive <= '0;
      sp1 <= '0; sp2 <= '0; sp3 <= '0; cl1 <= 1'b0; cl2 <= 1'b0; cl3 <= 1'b0;
    end else begin
      // stage 1: error, wrap or saturate
      if (wrap_en)                        e1 <= DW'(diff);
      else if (diff > (DW+1)'(MAXD))      e1 <= DW'(MAXD);
      else if (diff < -(DW+1)'(MAXD) - 1) e1 <= DW'(-MAXD - 1);
      else                                e1 <= DW'(diff);
      sp1 <= setpoint;  cl1 <= close_loop;
      // stage 2: slew-rate limiter
      if (step > lim)       el <= DW'((DW+2)'(el) + lim);
      else if (step < -lim) el <= DW'((DW+2)'(el) - lim);
      else                  el <= e1;
      sp2 <= sp1;  cl2 <= cl1;
      // stage 3: proportional and integral paths
      if ((pp >>> P_SHIFT) > (DW+KW)'(MAXD))           p3 <= DW'(MAXD);
      else if ((pp >>> P_SHIFT) < -(DW+KW)'(MAXD) - 1) p3 <= DW'(-MAXD - 1);
      else                                             p3 <= DW'(pp >>> P_SHIFT);
      if (!cl2)                              acc <= '0;
      else if (wrap_en)                      acc <= AW'($signed((DW+I_SHIFT)'(acc_n)));
      else if (acc_n > (AW+1)'(MAXA))        acc <= AW'(MAXA);
      else if (acc_n < -(AW+1)'(MAXA))       acc <= AW'(-MAXA);
      else                                   acc <= AW'(acc_n);
      sp3 <= sp2;  cl3 <= cl2;
      // stage 4: sum and loop select
      if (!cl3)                          drive <= sp3;
      else if (wrap_en)                  drive <= DW'(sum);
      else if (sum > (DW+2)'(MAXD))      drive <= DW'(MAXD);
      else if (sum < -(DW+2)'(MAXD) - 1) drive <= DW'(-MAXD - 1);
      else                               drive <= DW'(sum);
    end
  end

endmodule
