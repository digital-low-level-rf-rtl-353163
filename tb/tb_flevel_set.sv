`timescale 1ns/1ps
// tb_flevel_set: random I, Q and LO values; the DAC word 3 cycles later must
// equal round((I*cos + Q*sin)/2^17), saturated to 16 bits.
module tb_flevel_set;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [17:0] i_in, q_in, lo_cos, lo_sin;
  logic signed [15:0] dac;
  flevel_set dut (.clk, .i_in, .q_in, .lo_cos, .lo_sin, .dac);
  longint ex [600];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 600; n++) begin
      real r;
      i_in = 18'($urandom); q_in = 18'($urandom);
      lo_cos = 18'($urandom % 120001) - 18'sd60000;
      lo_sin = 18'($urandom % 120001) - 18'sd60000;
      r = $floor((real'(i_in) * real'(lo_cos) + real'(q_in) * real'(lo_sin)) / 131072.0 + 0.5);
      if (r > 32767.0) r = 32767.0;
      if (r < -32768.0) r = -32768.0;
      ex[n] = longint'(r);
      @(negedge clk);
      if (n >= 3) begin
        checks++;
        if (longint'(dac) != ex[n-2]) begin
          failures++;
          if (failures < 8) $display("n=%0d dac %0d exp %0d", n, dac, ex[n-2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
