`timescale 1ns/1ps
// tb_digital_lo: checks that the LO produces cos/sin of n*2*pi*4/11 with
// amplitude 60000, that the pattern repeats exactly every 11 samples, and
// that the first phase-0 sample after reset appears after the 20-cycle
// CORDIC latency (output seen after edge k belongs to sample n = k - 20).
module tb_digital_lo;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [17:0] lo_cos, lo_sin;
  logic signed [17:0] hc [300], hs [300];

  digital_lo dut (.clk, .rst, .lo_cos, .lo_sin);

  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (30) @(negedge clk);
    rst = 0;
    for (int k = 1; k < 300; k++) begin
      @(negedge clk);
      hc[k] = lo_cos; hs[k] = lo_sin;
      if (k >= 20) begin
        real ec, es;
        ec = 60000.0 * $cos(TWO_PI * 4.0 * (k - 20) / 11.0);
        es = 60000.0 * $sin(TWO_PI * 4.0 * (k - 20) / 11.0);
        checks++;
        if (fabs(real'(lo_cos) - ec) > 4.0 || fabs(real'(lo_sin) - es) > 4.0) begin
          failures++;
          if (failures < 8) $display("k=%0d cos %0d exp %f sin %0d exp %f", k, lo_cos, ec, lo_sin, es);
        end
      end
      if (k >= 40) begin
        checks++;
        if (hc[k] != hc[k-11] || hs[k] != hs[k-11]) begin
          failures++;
          if (failures < 8) $display("k=%0d not periodic in 11", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
