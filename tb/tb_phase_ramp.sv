`timescale 1ns/1ps
// tb_phase_ramp: checks the bucket-alignment ramp sequence.
//  1. setpoint write in idle; wrong event code and disabled ramp do nothing
//  2. a ramp of 5 steps of 3000: first step delay+2 cycles after the event,
//     then one every period+2 cycles, final setpoint base+15000, done set;
//     a setpoint write during the ramp is ignored
//  3. loss of lock during the ramp: fault, ramp stops
//  4. total-time timeout: fault
//  5. a 40-step ramp of 100000 LSB (over 15 turns) ends on
//     base + 4000000 modulo 2^18
module tb_phase_ramp;
  import llrf_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] evr_code;
  logic evr_valid, sp_load, locked, busy, done, fault;
  ramp_cfg_t cfg;
  logic signed [17:0] sp_base, phase_sp;
  phase_ramp dut (.clk, .rst, .evr_code, .evr_valid, .cfg, .sp_load, .sp_base, .locked,
                  .phase_sp, .busy, .done, .fault);

  int cyc = 0;
  int chg [$];
  logic signed [17:0] last;
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (!rst && phase_sp != last && busy) chg.push_back(cyc);
    last <= phase_sp;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic event_(input logic [7:0] code, output int ecyc);
    evr_code = code; evr_valid = 1; ecyc = cyc; @(negedge clk); evr_valid = 0;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e;
    evr_code = 0; evr_valid = 0; sp_load = 0; locked = 1; sp_base = 0; last = 0;
    cfg = '{enable: 1'b0, event_code: 8'h2a, delay: 24'd10, step: 18'sd3000, steps: 16'd5,
            period: 24'd20, timeout: 32'd10000};
    repeat (3) @(negedge clk);
    rst = 0;
    // 1.
    sp_base = 18'sd1000; sp_load = 1; @(negedge clk); sp_load = 0; @(negedge clk);
    check(phase_sp == 18'sd1000, "setpoint write");
    event_(8'h2a, e); repeat (5) @(negedge clk);
    check(!busy, "started while disabled");
    cfg.enable = 1;
    event_(8'h2b, e); repeat (5) @(negedge clk);
    check(!busy, "started on wrong code");
    // 2.
    chg.delete();
    event_(8'h2a, e);
    repeat (20) @(negedge clk);
    sp_base = 18'sd7; sp_load = 1; @(negedge clk); sp_load = 0;
    wait (!busy); @(negedge clk);
    check(done && !fault, "ramp not done");
    check(phase_sp == 18'sd16000, $sformatf("final setpoint %0d", phase_sp));
    check(chg.size() == 5, $sformatf("%0d steps", chg.size()));
    if (chg.size() == 5) begin
      // e is the cycle the event is presented; it is sampled at the end of that
      // cycle, and the step lands delay+2 edges later, seen one cycle on
      check(chg[0] - e == 10 + 3, $sformatf("first step after %0d cycles", chg[0] - e));
      for (int k = 1; k < 5; k++) check(chg[k] - chg[k-1] == 22, $sformatf("step spacing %0d", chg[k] - chg[k-1]));
    end
    // 3. lock lost
    event_(8'h2a, e);
    repeat (40) @(negedge clk);
    locked = 0;
    repeat (3) @(negedge clk);
    check(fault && !busy && !done, "no fault on lock loss");
    check(phase_sp == 18'sd19000 || phase_sp == 18'sd22000, $sformatf("setpoint after abort %0d", phase_sp));
    locked = 1;
    // 4. timeout
    cfg.timeout = 50;
    event_(8'h2a, e);
    repeat (60) @(negedge clk);
    check(fault && !busy, "no fault on timeout");
    // 5. multi-turn ramp
    cfg.timeout = 100000; cfg.step = 18'sd100000; cfg.steps = 40; cfg.period = 3;
    sp_base = -18'sd5000; sp_load = 1; @(negedge clk); sp_load = 0;
    event_(8'h2a, e);
    wait (!busy); @(negedge clk);
    check(done && phase_sp == 18'((-5000 + 4000000) % 262144), $sformatf("multi-turn final %0d", phase_sp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
