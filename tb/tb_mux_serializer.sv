`timescale 1ns/1ps
// tb_mux_serializer: inputs change every cycle; a 'sample' strobe every 20
// cycles must latch the values present at the strobe and send stream k in
// the k-th cycle after it, with dchan = k and dvalid high for exactly 16
// cycles per frame.
module tb_mux_serializer;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sample;
  logic signed [17:0] din [16];
  logic signed [17:0] dout;
  logic dvalid;
  logic [3:0] dchan;
  mux_serializer dut (.clk, .rst, .sample, .din, .dout, .dvalid, .dchan);
  logic signed [17:0] snap [16];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nvalid;
    sample = 0;
    foreach (din[k]) din[k] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 20; f++) begin
      nvalid = 0;
      for (int c = 0; c < 20; c++) begin
        foreach (din[k]) din[k] = 18'($urandom);
        sample = (c == 0);
        if (c == 0) snap = din;
        @(negedge clk);
        if (c >= 1) begin
          if (dvalid) nvalid++;
          if (c <= 16) begin
            checks++;
            if (!dvalid || dchan != 4'(c - 1) || dout != snap[c-1]) begin
              failures++;
              if (failures < 8) $display("f%0d c%0d v%0d ch%0d d%0d exp %0d", f, c, dvalid, dchan, dout, snap[c-1]);
            end
          end
        end
      end
      sample = 0;
      checks++;
      if (nvalid != 16) begin failures++; $display("frame %0d had %0d valid", f, nvalid); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
