`timescale 1ns/1ps
// tb_fast_interlock: the testbench sends frames of 8 channels (16 serial
// I/Q words) built from chosen amplitude A_k and phase ph_k.
//  1. in-range values: no latch, permit high; the amp/phs list read on a
//     separate clock holds 1.6468*A_k and ph_k for every channel
//  2. channel 1 amplitude above its HIGH threshold: the latch rises exactly
//     21 cycles after that channel's Q word (well under 1 us = 114 cycles at
//     114.67 MHz), first_fault = bit 1, fault_amp = its amplitude, permit low
//  3. a later phase trip of channel 2 shows in inlk_status but not in
//     first_fault
//  4. inlk_reset with good values clears the latch
//  5. a masked source (channel 0 below its low limit) sets status only
//  6. an ARC input latches with first_fault = bit 17 within 3 cycles
module tb_fast_interlock;
  import llrf_pkg::*;
  localparam real K = 1.6467602581;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 0, lclk = 0, rst = 1;
  always #5 clk = ~clk;
  always #7 lclk = ~lclk;
  int checks = 0, failures = 0;

  logic signed [17:0] din;
  logic dvalid;
  logic [3:0] dchan;
  logic [1:0] arc;
  inlk_chan_cfg_t chan_cfg [8];
  logic [17:0] mask, inlk_status, first_fault;
  logic inlk_reset, inlk_latch, rf_permit;
  logic [17:0] fault_amp;
  logic signed [17:0] fault_phs;
  logic [2:0] list_addr;
  logic [35:0] list_data;

  fast_interlock dut (.clk, .rst, .din, .dvalid, .dchan, .arc, .chan_cfg, .mask, .inlk_reset,
    .inlk_status, .first_fault, .inlk_latch, .fault_amp, .fault_phs, .rf_permit,
    .list_clk(lclk), .list_addr, .list_data);

  real A [8], PH [8];       // PH in turns
  int  cyc = 0, q1_cyc = -1, latch_cyc = -1;
  // cycle counter; latch_cyc = first cycle in which inlk_latch is seen high
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (!rst && inlk_latch && latch_cyc < 0) latch_cyc <= cyc;
  end

  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic frame(input bit mark1 = 0);
    int k;
    for (int c = 0; c < 16; c++) begin
      k = c / 2;
      din = 18'($rtoi((c % 2 == 0) ? A[k] * $cos(TWO_PI * PH[k]) : A[k] * $sin(TWO_PI * PH[k])));
      dvalid = 1; dchan = 4'(c);
      if (mark1 && c == 3) q1_cyc = cyc;
      @(negedge clk);
    end
    dvalid = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    din = 0; dvalid = 0; dchan = 0; arc = 0; inlk_reset = 0; mask = '1; list_addr = 0;
    for (int k = 0; k < 8; k++) begin
      A[k] = 10000.0 + 3000.0 * k; PH[k] = 0.1 * k - 0.35;
      chan_cfg[k] = '{amp_mode: CMP_OFF, phs_mode: CMP_OFF, amp_lo: 0, amp_hi: 0, phs_lo: 0, phs_hi: 0};
    end
    chan_cfg[0].amp_mode = CMP_WINDOW; chan_cfg[0].amp_lo = 18'd10000; chan_cfg[0].amp_hi = 18'd30000;
    chan_cfg[1].amp_mode = CMP_HIGH;   chan_cfg[1].amp_hi = 18'd40000;
    chan_cfg[2].phs_mode = CMP_WINDOW; chan_cfg[2].phs_lo = -18'sd45000; chan_cfg[2].phs_hi = 18'sd0;
    repeat (3) @(negedge clk);
    rst = 0;
    // 1.
    repeat (10) frame();
    check(!inlk_latch && rf_permit && inlk_status == 0, $sformatf("tripped on good values: status %h", inlk_status));
    for (int k = 0; k < 8; k++) begin
      real ea, ep, gp;
      @(negedge lclk); list_addr = 3'(k);
      @(negedge lclk); @(negedge lclk);
      ea = K * A[k]; ep = PH[k] * 262144.0;
      gp = real'($signed(list_data[17:0]));
      check(fabs(real'(list_data[35:18]) - ea) < 4.0 && fabs(gp - ep) < 8.0,
            $sformatf("list ch%0d amp %0d exp %f phs %f exp %f", k, list_data[35:18], ea, gp, ep));
    end
    @(negedge clk);
    // 2. channel 1 too high
    A[1] = 30000.0;                      // 1.6468*30000 = 49403 > 40000
    latch_cyc = -1;
    frame(1);
    repeat (30) @(negedge clk);
    check(inlk_latch && !rf_permit, "no latch on amplitude high");
    check(latch_cyc - q1_cyc == 21, $sformatf("latch latency %0d cycles", latch_cyc - q1_cyc));
    check(first_fault == 18'h2, $sformatf("first_fault %h", first_fault));
    check(fabs(real'(fault_amp) - K * 30000.0) < 4.0, $sformatf("fault_amp %0d", fault_amp));
    // 3. later phase trip of channel 2
    PH[2] = 0.2;
    repeat (3) frame();
    check(inlk_status[1] && inlk_status[8 + 2], $sformatf("status %h", inlk_status));
    check(first_fault == 18'h2, "first_fault overwritten");
    // 4. reset with good values
    A[1] = 13000.0; PH[2] = -0.05;
    repeat (3) frame();
    inlk_reset = 1; @(negedge clk); inlk_reset = 0;
    repeat (3) frame();
    check(!inlk_latch && rf_permit && first_fault == 0, "latch not cleared by reset");
    // 5. masked source
    mask[0] = 0; A[0] = 1000.0;
    repeat (3) frame();
    check(inlk_status[0] && !inlk_latch, "masked source latched or not shown");
    A[0] = 10000.0;
    repeat (2) frame();
    mask[0] = 1;
    repeat (3) frame();
    // 6. ARC detector
    check(!inlk_latch, "latched before arc");
    arc[1] = 1; latch_cyc = -1; q1_cyc = cyc;
    repeat (5) @(negedge clk);
    check(inlk_latch && first_fault == 18'h20000, $sformatf("arc: latch %0d first %h", inlk_latch, first_fault));
    check(latch_cyc - q1_cyc <= 3, $sformatf("arc latency %0d", latch_cyc - q1_cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
