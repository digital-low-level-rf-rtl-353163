`timescale 1ns/1ps
// tb_pi_scalar: directed checks of the PI controller.
//  1. open loop: drive equals the setpoint 4 cycles later
//  2. proportional path (kp = 1.0, ki = 0): drive = sp - meas after 4 cycles
//  3. slew limiter: a 1000-LSB error step with slew_max = 10 ramps the drive
//     by 10 per cycle
//  4. phase wrap: sp - meas = 260000 wraps to -2144 with wrap_en, and
//     saturates to 131071 without
//  5. integral path (kp = 0): constant error e gives drive growing by
//     e*ki/2^16 per cycle
//  6. integrator limit: without wrap_en the drive stops at 131071; with
//     wrap_en it runs on through +-2^17 (a phase drive turning past 180 deg)
module tb_pi_scalar;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [17:0] setpoint, measured, kp, ki, drive;
  logic [16:0] slew_max;
  logic wrap_en, close_loop;
  pi_scalar dut (.clk, .rst, .setpoint, .measured, .kp, .ki, .slew_max, .wrap_en, .close_loop, .drive);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic cyc(input int n); repeat (n) @(negedge clk); endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    setpoint = 0; measured = 0; kp = 0; ki = 0; slew_max = 17'h1ffff; wrap_en = 0; close_loop = 0;
    cyc(3); rst = 0; cyc(2);
    // 1. open loop, latency 4
    setpoint = 18'sd12345; cyc(3);
    check(drive != 18'sd12345, "open loop drive came before 4 cycles");
    cyc(1);
    check(drive == 18'sd12345, $sformatf("open loop drive %0d", drive));
    // 2. proportional
    kp = 18'sd1024; close_loop = 1; setpoint = 18'sd5000; measured = 18'sd1000; cyc(10);
    check(drive == 18'sd4000, $sformatf("P drive %0d exp 4000", drive));
    measured = 18'sd3000; cyc(3);
    check(drive == 18'sd4000, "P latency shorter than 4");
    cyc(1);
    check(drive == 18'sd2000, $sformatf("P drive %0d exp 2000 after 4", drive));
    // 3. slew limiter
    measured = 18'sd5000; cyc(10); slew_max = 17'd10;
    check(drive == 18'sd0, $sformatf("zero error drive %0d", drive));
    measured = 18'sd4000; cyc(4);
    for (int k = 1; k <= 20; k++) begin
      check(drive == 18'(10 * k), $sformatf("slew k=%0d drive %0d", k, drive));
      cyc(1);
    end
    // 4. wrap
    slew_max = 17'h1ffff; setpoint = 18'sd130000; measured = -18'sd130000; wrap_en = 1; cyc(8);
    check(drive == -18'sd2144, $sformatf("wrapped drive %0d", drive));
    wrap_en = 0; cyc(8);
    check(drive == 18'sd131071, $sformatf("saturated drive %0d", drive));
    // 5. integrator: e = 1000, ki = 6554 -> 100.006 LSB per cycle
    close_loop = 0; cyc(6);
    kp = 0; ki = 18'sd6554; setpoint = 18'sd2000; measured = 18'sd1000; close_loop = 1;
    cyc(4);
    begin
      int d0, d1;
      cyc(2); d0 = drive;
      cyc(100); d1 = drive;
      check((d1 - d0) >= 9990 && (d1 - d0) <= 10010, $sformatf("integral growth %0d over 100 cycles", d1 - d0));
    end
    // 6. integrator saturation and wrap-around
    cyc(1500);
    check(drive == 18'sd131071, $sformatf("integrator not saturated: %0d", drive));
    close_loop = 0; cyc(6); wrap_en = 1; close_loop = 1; cyc(6);
    begin
      int d0, d1, dd;
      d0 = drive;
      cyc(1500); d1 = drive;
      dd = d1 - d0;                          // 1500*100.006 = 150009, seen mod 2^18
      check(d1 < d0, $sformatf("wrapping drive did not pass +2^17: %0d -> %0d", d0, d1));
      check(dd + 262144 >= 149990 && dd + 262144 <= 150030, $sformatf("wrapped growth %0d", dd + 262144));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
