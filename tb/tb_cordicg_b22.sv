`timescale 1ns/1ps
// tb_cordicg_b22: self-checking test of the CORDIC in both operations.
// Random vectors go in one per cycle, alternating rotate and vector mode;
// every output is compared 20 cycles later with a floating-point reference
// (amplitude, atan2, cos/sin).  This checks the function, the gain K and the
// 20-cycle latency at once.
module tb_cordicg_b22;
  import llrf_pkg::*;
  localparam int LAT = 20;
  localparam real K = 1.6467602581;
  localparam real TWO_PI = 6.283185307179586;
  localparam int NVEC = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cordic_op_e op;
  logic signed [17:0] xin, yin, xout, yout;
  logic signed [17:0] zin, zout;
  cordicg_b22 dut (.clk, .op, .xin, .yin, .zin, .xout, .yout, .zout);

  // expected values indexed by issue cycle
  real ex_x[NVEC], ex_y[NVEC], ex_z[NVEC];
  bit  ex_vec[NVEC];

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real wrapd(input real d);   // wrap a phase difference in LSB
    real r = d;
    while (r > 131072.0) r -= 262144.0;
    while (r < -131072.0) r += 262144.0;
    return r;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, ph;
    int m;
    for (int n = 0; n < NVEC + LAT + 2; n++) begin
      @(negedge clk);
      if (n < NVEC) begin
        a  = 1000.0 + ($urandom % 30000);
        ph = ($urandom % 262144) - 131072.0;
        if (n % 2 == 0) begin
          op  = CORDIC_VECTOR;
          xin = 18'($rtoi(a * $cos(ph / 262144.0 * TWO_PI)));
          yin = 18'($rtoi(a * $sin(ph / 262144.0 * TWO_PI)));
          zin = 18'($urandom);
          ex_vec[n] = 1;
          ex_x[n] = K * $sqrt(real'(xin) * real'(xin) + real'(yin) * real'(yin));
          ex_z[n] = $atan2(real'(yin), real'(xin)) / TWO_PI * 262144.0;
        end else begin
          op  = CORDIC_ROTATE;
          xin = 18'($rtoi(a));
          yin = 18'($rtoi(a / 2));
          zin = 18'($rtoi(ph));
          ex_vec[n] = 0;
          ex_x[n] = K * (real'(xin) * $cos(ph / 262144.0 * TWO_PI) - real'(yin) * $sin(ph / 262144.0 * TWO_PI));
          ex_y[n] = K * (real'(xin) * $sin(ph / 262144.0 * TWO_PI) + real'(yin) * $cos(ph / 262144.0 * TWO_PI));
        end
      end
      // output of the vector issued LAT cycles ago (checked just before the edge)
      if (n >= LAT && n - LAT < NVEC) begin
        m = n - LAT;
        checks++;
        if (ex_vec[m]) begin
          if (fabs(real'(xout) - ex_x[m]) > 3.0 || fabs(wrapd(real'(zout) - ex_z[m])) > 3.0 + 2.0 * 262144.0 / (TWO_PI * ex_x[m] / K)) begin
            failures++;
            if (failures < 10) $display("vector %0d: amp %0d exp %f phs %0d exp %f", m, xout, ex_x[m], zout, ex_z[m]);
          end
        end else begin
          if (fabs(real'(xout) - ex_x[m]) > 3.0 || fabs(real'(yout) - ex_y[m]) > 3.0) begin
            failures++;
            if (failures < 10) $display("rotate %0d: x %0d exp %f y %0d exp %f", m, xout, ex_x[m], yout, ex_y[m]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
