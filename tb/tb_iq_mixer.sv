`timescale 1ns/1ps
// tb_iq_mixer: random ADC words on all 8 channels and random LO values; two
// cycles later every channel must give floor(adc*cos/2^15) and
// floor(adc*sin/2^15).
module tb_iq_mixer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [15:0] adc [8];
  logic signed [17:0] lo_cos, lo_sin;
  logic signed [17:0] i_out [8], q_out [8];
  iq_mixer dut (.clk, .adc, .lo_cos, .lo_sin, .i_out, .q_out);
  longint ei [300][8], eq [300][8];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      lo_cos = 18'($urandom % 120001) - 18'sd60000;
      lo_sin = 18'($urandom % 120001) - 18'sd60000;
      for (int k = 0; k < 8; k++) begin
        adc[k] = 16'($urandom);
        ei[n][k] = longint'($floor(real'(adc[k]) * real'(lo_cos) / 32768.0));
        eq[n][k] = longint'($floor(real'(adc[k]) * real'(lo_sin) / 32768.0));
      end
      @(negedge clk);
      if (n >= 2) for (int k = 0; k < 8; k++) begin
        checks++;
        if (longint'(i_out[k]) != ei[n-1][k] || longint'(q_out[k]) != eq[n-1][k]) begin
          failures++;
          if (failures < 8) $display("n=%0d ch%0d i %0d exp %0d", n, k, i_out[k], ei[n-1][k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
