`timescale 1ns/1ps
// tb_fwashout: (1) a DC step passes unchanged 2 cycles later and is removed
// (|y| <= 2) from 70 cycles on; (2) an IF tone at 4/11 of the sample rate on
// a DC offset comes out with zero mean and its amplitude scaled by the
// filter's gain at the IF, |H| = 1.066 (8529), within 1.5%.
module tb_fwashout;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [15:0] din, dout;
  fwashout dut (.clk, .rst, .din, .dout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real s, mx;
    din = 0;
    repeat (5) @(negedge clk);
    rst = 0;
    din = 16'sd12000;
    @(negedge clk); din = 16'sd12000;
    @(negedge clk);
    check(dout == 16'sd12000, $sformatf("step after 2 cycles: %0d", dout));
    for (int k = 3; k < 200; k++) begin
      @(negedge clk);
      if (k >= 70) check(dout <= 2 && dout >= -2, $sformatf("DC not removed at %0d: %0d", k, dout));
    end
    // IF tone with offset
    for (int k = 0; k < 400; k++) begin
      din = 16'($rtoi(-5000.0 + 8000.0 * $cos(TWO_PI * 4.0 * k / 11.0)));
      @(negedge clk);
      if (k >= 300 && k < 388) begin
        if (k == 300) begin s = 0; mx = 0; end
        s += real'(dout);
        if (real'(dout) > mx) mx = real'(dout);
      end
    end
    check(s / 88.0 < 2.0 && s / 88.0 > -2.0, $sformatf("mean %f", s / 88.0));
    check(mx > 8400.0 && mx < 8650.0, $sformatf("peak %f", mx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
