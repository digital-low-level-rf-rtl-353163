`timescale 1ns/1ps
// tb_cic_multi: serial frames of 16 channels carry a different constant on
// every channel.  For decimation R = 1, 3 and 8 (shift 0, 2, 5) each channel
// must, once settled, output floor(x * R^2 / 2^shift), and there must be one
// output per channel every R frames.  A step of every channel's value is
// then followed to the new constant within three output periods.
module tb_cic_multi;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [11:0] decim;
  logic [5:0] shift;
  logic signed [17:0] din, dout;
  logic dvalid, ovalid;
  logic [3:0] dchan, ochan;
  cic_multi dut (.clk, .rst, .decim, .shift, .din, .dvalid, .dchan, .dout, .ovalid, .ochan);

  int x [16];
  int nout [16];
  int expv [16];
  bit checking;

  // output monitor
  always @(negedge clk) if (!rst && ovalid) begin
    nout[ochan]++;
    if (checking) begin
      checks++;
      if (int'(dout) != expv[ochan]) begin
        failures++;
        if (failures < 8) $display("R=%0d ch%0d out %0d exp %0d", decim, ochan, dout, expv[ochan]);
      end
    end
  end

  task automatic frames(input int nf);
    for (int f = 0; f < nf; f++) begin
      for (int c = 0; c < 16; c++) begin
        din = 18'(x[c]); dvalid = 1; dchan = 4'(c);
        @(negedge clk);
      end
      dvalid = 0;
      repeat (3) @(negedge clk);
    end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int rs [3] = '{1, 3, 8};
    int ss [3] = '{0, 2, 5};
    din = 0; dvalid = 0; dchan = 0; checking = 0;
    for (int t = 0; t < 3; t++) begin
      rst = 1; decim = 12'(rs[t]); shift = 6'(ss[t]);
      repeat (3) @(negedge clk);
      rst = 0;
      for (int c = 0; c < 16; c++) begin
        x[c] = int'($urandom % 16001) - 8000;
        expv[c] = int'($floor(real'(x[c]) * rs[t] * rs[t] / (2.0 ** ss[t])));
      end
      checking = 0;
      frames(3 * rs[t]);
      foreach (nout[c]) nout[c] = 0;
      checking = 1;
      frames(10 * rs[t]);
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (nout[c] != 10) begin failures++; $display("R=%0d ch%0d %0d outputs in 10 periods", rs[t], c, nout[c]); end
      end
      // step every channel and let it settle for three output periods
      checking = 0;
      for (int c = 0; c < 16; c++) begin
        x[c] = -x[c] / 2;
        expv[c] = int'($floor(real'(x[c]) * rs[t] * rs[t] / (2.0 ** ss[t])));
      end
      frames(3 * rs[t]);
      checking = 1;
      frames(2 * rs[t]);
      checking = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
