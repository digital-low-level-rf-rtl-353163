`timescale 1ns/1ps
// tb_ddc_ratios: the non-IQ receive chain at both IF/sample ratios in use.
//
// Two chains digital_lo -> fdownconvert -> fiq_interp are built, one with
// f_IF/f_S = 4/11 (the default station, INV_SIN = round(2^15/sin(2*pi*4/11))
// = 43358) and one with 4/23 (a station with a different LO plan,
// INV_SIN = round(2^15/sin(2*pi*4/23)) = 36906).  Each chain's ADC input is
// a tone A*cos(n*th - phi) written from that chain's own LO samples
// (y = A*(cos(phi)*lo_cos + sin(phi)*lo_sin)/60000), so the recovered
// baseband must be I = A*cos(phi)*60000/2^15, Q = A*sin(phi)*60000/2^15.
// For each of 12 random vectors, held for 200 cycles, the last 100 cycles of
// I and Q are compared with that value (tolerance 12 LSB + 0.2 %).  The LO
// must also repeat exactly every DEN samples.
module tb_ddc_ratios;
  localparam real TWO_PI = 6.283185307179586;
  localparam int NR = 2;
  localparam int NUM [NR] = '{4, 4};
  localparam int DEN [NR] = '{11, 23};
  localparam int INV [NR] = '{43358, 36906};
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [17:0] lo_c [NR], lo_s [NR], iq [NR], i_out [NR], q_out [NR];
  logic signed [15:0] adc [NR];
  logic               iq_sel [NR];
  real                amp, phs;

  for (genvar g = 0; g < NR; g++) begin : g_chain
    digital_lo #(.LO_NUM(NUM[g]), .LO_DEN(DEN[g])) u_lo (.clk, .rst, .lo_cos(lo_c[g]), .lo_sin(lo_s[g]));
    fdownconvert #(.INV_SIN(INV[g])) u_dc (.clk, .rst, .adc(adc[g]), .lo_cos(lo_c[g]), .lo_sin(lo_s[g]),
                                           .iq(iq[g]), .iq_sel(iq_sel[g]));
    fiq_interp u_iq (.clk, .iq(iq[g]), .iq_sel(iq_sel[g]), .i_out(i_out[g]), .q_out(q_out[g]));
    always_comb
      adc[g] = 16'($rtoi($floor(amp * ($cos(phs) * real'(lo_c[g]) + $sin(phs) * real'(lo_s[g])) / 60000.0 + 0.5)));
  end

  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  // LO period check
  logic signed [17:0] hist [NR][$];
  int nper_bad [NR] = '{0, 0};
  int ncyc = 0;
  always @(negedge clk) if (!rst) ncyc++;
  always @(negedge clk) if (ncyc > 30) begin       // after the LO pipeline has filled
    for (int g = 0; g < NR; g++) begin
      hist[g].push_back(lo_c[g]);
      if (hist[g].size() > DEN[g] + 1) begin
        void'(hist[g].pop_front());
        if (hist[g][DEN[g]] != hist[g][0]) nper_bad[g]++;
      end
    end
  end

  initial begin
    #100000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    amp = 0.0; phs = 0.0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (40) @(negedge clk);
    for (int v = 0; v < 12; v++) begin
      real ei, eq, tol;
      amp = 2000.0 + real'($urandom % 30000);
      phs = TWO_PI * real'($urandom % 1000) / 1000.0;
      ei = amp * $cos(phs) * 60000.0 / 32768.0;
      eq = amp * $sin(phs) * 60000.0 / 32768.0;
      tol = 12.0 + 0.002 * amp * 60000.0 / 32768.0;
      repeat (100) @(negedge clk);
      for (int k = 0; k < 100; k++) begin
        for (int g = 0; g < NR; g++) begin
          checks++;
          if (fabs(real'(i_out[g]) - ei) > tol || fabs(real'(q_out[g]) - eq) > tol) begin
            failures++;
            if (failures < 10)
              $display("ratio %0d/%0d: I %0d Q %0d, expected %.1f %.1f", NUM[g], DEN[g], i_out[g], q_out[g], ei, eq);
          end
        end
        @(negedge clk);
      end
    end
    for (int g = 0; g < NR; g++) begin
      checks++;
      if (nper_bad[g] != 0) begin
        failures++;
        $display("LO %0d/%0d not periodic in %0d samples (%0d misses)", NUM[g], DEN[g], DEN[g], nper_bad[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
