`timescale 1ns/1ps
// tb_netan_exc: with freq = 2^32/64 and amp = 20000 the amplitude-loop
// output must be 20000*cos(2*pi*k/64) for the k-th cycle after enable,
// delayed by the 20-cycle CORDIC, while the phase-loop output stays zero;
// with sel = 1 the roles swap, and with en low both are zero.
module tb_netan_exc;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, sel;
  logic [31:0] freq;
  logic [16:0] amp;
  logic signed [17:0] exc_amp, exc_phs;
  netan_exc dut (.clk, .rst, .en, .sel, .freq, .amp, .exc_amp, .exc_phs);

  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0; sel = 0; freq = 32'h0400_0000; amp = 17'd20000;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (25) @(negedge clk);
    check(exc_amp == 0 && exc_phs == 0, "output while disabled");
    en = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);          // after edge n
      if (n >= 19) begin
        real e;
        e = 20000.0 * $cos(TWO_PI * (n - 19) / 64.0);
        check(fabs(real'(exc_amp) - e) < 6.0 && exc_phs == 0, $sformatf("n=%0d amp-loop %0d exp %f", n, exc_amp, e));
      end else check(exc_amp == 0, "output before latency");
    end
    sel = 1;
    repeat (25) @(negedge clk);
    begin
      int nz = 0;
      for (int n = 0; n < 64; n++) begin
        @(negedge clk);
        if (exc_phs != 0) nz++;
        check(exc_amp == 0, "amp-loop output with sel=1");
      end
      check(nz > 55, $sformatf("phase-loop excitation nonzero in %0d of 64", nz));
    end
    en = 0;
    repeat (25) @(negedge clk);
    check(exc_amp == 0 && exc_phs == 0, "output after disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
