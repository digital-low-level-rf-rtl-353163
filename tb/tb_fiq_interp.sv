`timescale 1ns/1ps
// tb_fiq_interp: random interleaved I/Q stream; 3 cycles after each input
// cycle, i_out and q_out must equal the latest I and Q entered up to it.
module tb_fiq_interp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [17:0] iq, i_out, q_out;
  logic iq_sel;
  fiq_interp dut (.clk, .iq, .iq_sel, .i_out, .q_out);
  logic signed [17:0] li [600], lq [600];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [17:0] ci = 0, cq = 0;
    iq_sel = 0; iq = 0;
    for (int n = 0; n < 600; n++) begin
      iq_sel = n[0];
      iq = 18'($urandom);
      if (iq_sel) cq = iq; else ci = iq;
      li[n] = ci; lq[n] = cq;
      @(negedge clk);
      if (n >= 6) begin
        // after the edge that ends cycle n, outputs hold the state of cycle n-2
        checks++;
        if (i_out != li[n-2] || q_out != lq[n-2]) begin
          failures++;
          if (failures < 8) $display("n=%0d i %0d exp %0d q %0d exp %0d", n, i_out, li[n-2], q_out, lq[n-2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
