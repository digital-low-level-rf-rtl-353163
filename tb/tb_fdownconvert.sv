`timescale 1ns/1ps
// tb_fdownconvert: drives IF samples y_n = A*cos(n*th - phi) with an ideal
// LO (amplitude 60000, th = 2*pi*4/11) and checks the interleaved output
// against I = A*cos(phi), Q = A*sin(phi), scaled by 60000/2^15.  After a
// vector change at cycle t0 the output at t0+7 must still be the old vector
// and from t0+9 the new one, which pins the 8-cycle latency.
module tb_fdownconvert;
  localparam real TWO_PI = 6.283185307179586;
  localparam real L = 60000.0;
  localparam real TH = TWO_PI * 4.0 / 11.0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [15:0] adc;
  logic signed [17:0] lo_cos, lo_sin, iq;
  logic iq_sel;
  fdownconvert dut (.clk, .rst, .adc, .lo_cos, .lo_sin, .iq, .iq_sel);

  real ai [2000], aq [2000];     // expected I, Q per input cycle
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real a, ph;
    int t0;
    adc = 0; lo_cos = 0; lo_sin = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    t0 = 0;
    a = 20000.0; ph = 0.3;
    for (int n = 0; n < 1200; n++) begin
      if (n % 60 == 0) begin
        a  = 2000.0 + ($urandom % 28000);
        ph = TWO_PI * ($urandom % 1000) / 1000.0;
        t0 = n;
      end
      ai[n] = a * $cos(ph) * L / 32768.0;
      aq[n] = a * $sin(ph) * L / 32768.0;
      adc    = 16'($rtoi($floor(a * $cos(n * TH - ph) + 0.5)));
      lo_cos = 18'($rtoi($floor(L * $cos(n * TH) + 0.5)));
      lo_sin = 18'($rtoi($floor(L * $sin(n * TH) + 0.5)));
      @(negedge clk);
      // output now visible belongs to input cycle n-7 as newest sample
      if (n >= 20 && ((n - 7) % 60 == 59 || ((n - 7) % 60 >= 2 && (n - 7) % 60 < 8))) begin
        int m;
        real e;
        m = n - 7;
        e = iq_sel ? aq[m] : ai[m];
        checks++;
        if (fabs(real'(iq) - e) > 6.0) begin
          failures++;
          if (failures < 10) $display("n=%0d sel=%0d iq=%0d exp %f", n, iq_sel, iq, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
