`timescale 1ns/1ps
// tb_llrf_regs: register bank and two-master arbitration.
//  1. UDP writes reach the configuration outputs and read back two cycles
//     later with rvalid
//  2. simultaneous UDP and CPU requests: UDP is taken, cpu_ready stays low
//     while the UDP master keeps the bus, the held CPU write lands after it
//  3. a control write produces one-cycle pulses (interlock reset, trigger)
//  4. status words read back through the CPU master
module tb_llrf_regs;
  import llrf_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic udp_valid, udp_we, udp_rvalid, cpu_valid, cpu_we, cpu_ready, cpu_rvalid;
  logic [7:0] udp_addr, cpu_addr;
  logic [31:0] udp_wdata, udp_rdata, cpu_wdata, cpu_rdata;
  llrf_cfg_t cfg;
  inlk_chan_cfg_t inlk_cfg [N_ADC];
  llrf_stat_t stat;
  llrf_regs dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic uwr(input logic [7:0] a, input logic [31:0] d);
    udp_valid = 1; udp_we = 1; udp_addr = a; udp_wdata = d; @(negedge clk); udp_valid = 0; udp_we = 0;
  endtask
  task automatic urd(input logic [7:0] a, output logic [31:0] d);
    udp_valid = 1; udp_we = 0; udp_addr = a; @(negedge clk); udp_valid = 0;
    check(!udp_rvalid, "rvalid after one cycle");
    @(negedge clk);
    check(udp_rvalid, "no rvalid after two cycles");
    d = udp_rdata;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    int nwait;
    udp_valid = 0; udp_we = 0; udp_addr = 0; udp_wdata = 0;
    cpu_valid = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; stat = '0;
    repeat (3) @(negedge clk);
    rst = 0; @(negedge clk);
    check(cfg.inlk_mask == '1 && cfg.samp_per == 16 && !cfg.amp_close, "reset values");
    // 1.
    uwr(8'h01, 32'd45000);
    uwr(8'h05, -32'sd77);
    uwr(8'h25, 32'd9999);            // channel 1 amp hi
    uwr(8'h2a, -32'sd1234);          // channel 2 phase lo
    uwr(8'h43, 32'h7);               // channel 3: amp WINDOW, phase HIGH
    check(cfg.amp_sp == 18'sd45000 && cfg.phs_kp == -18'sd77, "setpoint / gain outputs");
    check(inlk_cfg[1].amp_hi == 18'd9999 && inlk_cfg[2].phs_lo == -18'sd1234, "threshold outputs");
    check(inlk_cfg[3].amp_mode == CMP_WINDOW && inlk_cfg[3].phs_mode == CMP_HIGH, "mode outputs");
    urd(8'h01, d); check(d == 32'd45000, $sformatf("read amp_sp %0d", d));
    urd(8'h05, d); check(d == -32'sd77, $sformatf("read phs_kp %0d", d));
    urd(8'h2a, d); check(d == -32'sd1234, $sformatf("read phs_lo %0d", d));
    // 2. priority
    cpu_valid = 1; cpu_we = 1; cpu_addr = 8'h03; cpu_wdata = 32'd222;
    udp_valid = 1; udp_we = 1; udp_addr = 8'h03; udp_wdata = 32'd111;
    nwait = 0;
    for (int k = 0; k < 5; k++) begin
      #1; if (!cpu_ready) nwait++;
      @(negedge clk);
    end
    udp_valid = 0; udp_we = 0;
    check(nwait == 5, $sformatf("cpu granted during udp access (%0d)", nwait));
    check(cfg.amp_kp == 18'sd111, "udp write lost");
    #1; check(cpu_ready, "cpu not granted when bus free");
    @(negedge clk); cpu_valid = 0; cpu_we = 0;
    check(cfg.amp_kp == 18'sd222, "held cpu write did not land");
    // 3. pulses
    uwr(8'h00, 32'h47);              // loops closed, interlock reset, trigger
    check(cfg.amp_close && cfg.phs_close && cfg.inlk_reset && cfg.wave_trig, "control bits");
    @(negedge clk);
    check(!cfg.inlk_reset && !cfg.wave_trig && cfg.amp_close, "pulses not one cycle");
    // 4. status through the CPU
    stat.amp_meas = 18'd31337; stat.inlk_latch = 1; stat.ramp_done = 1;
    cpu_valid = 1; cpu_we = 0; cpu_addr = 8'h85; @(negedge clk); cpu_valid = 0;
    @(negedge clk);
    check(cpu_rvalid && cpu_rdata == 32'd31337, $sformatf("status read %0d", cpu_rdata));
    cpu_valid = 1; cpu_addr = 8'h80; @(negedge clk); cpu_valid = 0; @(negedge clk);
    check(cpu_rvalid && cpu_rdata == 32'h0a, $sformatf("flags %h", cpu_rdata));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
