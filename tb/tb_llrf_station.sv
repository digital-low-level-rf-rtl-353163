`timescale 1ns/1ps
// tb_llrf_station: end-to-end test of one station at its default sizes.
//
// The DAC output is looped back to the cavity-probe ADC (channel 0) through
// a 10-cycle "cable"; ADC k (k = 1..7) sees the DAC word shifted right by k.
// The test configures the station over the local bus and runs:
//   A. open-loop drive, then the feedback latency: with the proportional
//      loops closed, zeroing the probe input changes the DAC 61 cycles later
//      (60 from the per-block delays plus the permit register)
//   B. closed amplitude and phase loops settle on their setpoints
//   C. network-analyzer excitation modulates the measured amplitude
//   D. a timing event starts a phase ramp of 50 steps (over 7 RF periods of
//      setpoint rotation, with phase wrap-around); the loop follows, the
//      ramp reports done
//   E. the waveform buffer is triggered and read on the Ethernet clock;
//      the stream order, the ADC0 baseband amplitude and the ADC1/ADC0
//      amplitude ratio (0.5) are checked over 16 frames
//   F. a too-high amplitude trips the fast interlock: DAC forced to zero,
//      first fault = channel 0 amplitude; reset and recovery.  An open-loop
//      drive step then measures the interlock latency from the first probe
//      sample above the threshold to the permit removal: at most 114 cycles
//      (1 us at 114.67 MHz, the Firmware section's figure)
//   G. an ARC detector input trips the interlock
//   H. UDP and CPU masters collide on the local bus
// Each mechanism is counted; one that never happened counts as a failure.
module tb_llrf_station;
  import llrf_pkg::*;
  logic clk = 0, eth_clk = 0, rst = 1, eth_rst = 1;
  always #4.36 clk = ~clk;          // 114.67 MHz
  always #4 eth_clk = ~eth_clk;     // 125 MHz
  int checks = 0, failures = 0;

  logic signed [15:0] adc [8];
  logic signed [15:0] dac;
  logic [1:0] arc;
  logic rf_permit;
  logic [7:0] evr_code;
  logic evr_valid;
  logic udp_valid, udp_we, udp_rvalid, cpu_valid, cpu_we, cpu_ready, cpu_rvalid;
  logic [7:0] udp_addr, cpu_addr;
  logic [31:0] udp_wdata, udp_rdata, cpu_wdata, cpu_rdata;
  logic [10:0] wave_raddr;
  logic [21:0] wave_rdata;
  logic wave_ready, wave_read_done;
  logic [2:0] list_addr;
  logic [35:0] list_data;

  llrf_station dut (.*);

  // ---------------- loop-back ----------------
  logic signed [15:0] cable [10];
  bit   probe_cut = 0;
  always @(posedge clk) begin
    cable[0] <= dac;
    for (int k = 1; k < 10; k++) cable[k] <= cable[k-1];
  end
  always_comb begin
    adc[0] = probe_cut ? 16'sd0 : cable[9];
    for (int k = 1; k < 8; k++) adc[k] = cable[9] >>> k;
  end

  // ---------------- helpers ----------------
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic cycles(input int n); repeat (n) @(negedge clk); endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    udp_valid = 1; udp_we = 1; udp_addr = a; udp_wdata = d; @(negedge clk);
    udp_valid = 0; udp_we = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    udp_valid = 1; udp_we = 0; udp_addr = a; @(negedge clk); udp_valid = 0;
    @(negedge clk); d = udp_rdata;
  endtask
  function automatic int sgn18(input logic [31:0] v); return int'($signed(v[17:0])); endfunction
  function automatic int wrap18(input int v);
    int r = v % 262144;
    if (r >= 131072) r -= 262144;
    if (r < -131072) r += 262144;
    return r;
  endfunction
  function automatic int iabs(input int v); return v < 0 ? -v : v; endfunction

  // ---------------- mechanism counters ----------------
  int n_open = 0, n_latency = 0, n_amp_lock = 0, n_phs_lock = 0, n_netan = 0, n_ramp = 0,
      n_wrap = 0, n_slew = 0, n_wave = 0, n_inlk_amp = 0, n_arc = 0, n_dac_off = 0,
      n_busconf = 0, n_cic = 0, n_list = 0, n_inlk_step = 0;
  always @(negedge clk) if (!rst) begin
    if (dut.u_pi_phs.cl2 && (dut.u_pi_phs.step > dut.u_pi_phs.lim || dut.u_pi_phs.step < -dut.u_pi_phs.lim))
      n_slew++;
    if (dut.u_cic_dyn.ovalid) n_cic++;
    if (cpu_valid && udp_valid && !cpu_ready) n_busconf++;
  end
  logic signed [17:0] last_rsp = 0;
  always @(negedge clk) begin
    if (!rst && ((last_rsp > 18'sd65536 && dut.ramp_sp < -18'sd65536) ||
                 (last_rsp < -18'sd65536 && dut.ramp_sp > 18'sd65536))) n_wrap++;
    last_rsp <= dut.ramp_sp;
  end

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    int am, pm, t0, t1, lat, amin, amax;
    int sp0;
    logic signed [15:0] hist [$];
    arc = 0; evr_code = 0; evr_valid = 0;
    udp_valid = 0; udp_we = 0; udp_addr = 0; udp_wdata = 0;
    cpu_valid = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0;
    wave_raddr = 0; wave_read_done = 0; list_addr = 0;
    cycles(5); rst = 0; eth_rst = 0; cycles(5);

    // interlock: channel 0 amplitude HIGH at 28000 (interlock CORDIC units)
    wr(8'h21, 32'd28000);
    wr(8'h40, 32'h1);
    wr(8'h0b, 32'h3ffff);

    // ---- A. open loop drive ----
    wr(8'h01, 32'd16000);                   // amplitude setpoint (drive units)
    wr(8'h02, 32'd20000); cycles(600);
    amax = 0; for (int k = 0; k < 22; k++) begin if (iabs(int'(dac)) > amax) amax = iabs(int'(dac)); cycles(1); end
    check(amax > 11000 && amax < 13000, $sformatf("open-loop DAC peak %0d (expected ~0.754*16000)", amax));
    if (amax > 11000) n_open++;
    // feedback latency: proportional loops only, then cut the probe
    wr(8'h03, 32'd128); wr(8'h05, 32'd256);
    wr(8'h07, 32'h1ffff); wr(8'h08, 32'h1ffff);
    wr(8'h00, 32'h3);                       // close (drive from kp only)
    wr(8'h01, 32'd40000); cycles(3000);
    hist.delete();
    for (int k = 0; k < 40; k++) begin hist.push_back(dac); cycles(1); end
    probe_cut = 1; t0 = cyc; lat = -1;
    for (int k = 0; k < 120 && lat < 0; k++) begin
      hist.push_back(dac);
      if (iabs(int'(hist[hist.size()-1]) - int'(hist[hist.size()-12])) > 32) lat = cyc - t0;
      cycles(1);
    end
    probe_cut = 0;
    check(lat == 61, $sformatf("probe-to-DAC latency %0d cycles, expected 61", lat));
    if (lat > 0) n_latency++;
    wr(8'h01, 32'd16000); wr(8'h00, 32'h0); cycles(400);

    // ---- B. closed loops with integral gain ----
    wr(8'h04, 32'd128); wr(8'h06, 32'd256);
    wr(8'h08, 32'd4000);                     // phase error slew limit
    wr(8'h02, 32'd20000);
    wr(8'h00, 32'h3); wr(8'h01, 32'd40000); cycles(6000);
    rd(8'h85, d); am = int'(d);
    rd(8'h86, d); pm = sgn18(d);
    check(iabs(am - 40000) < 200, $sformatf("amplitude loop: measured %0d, setpoint 40000", am));
    check(iabs(wrap18(pm - 20000)) < 200, $sformatf("phase loop: measured %0d, setpoint 20000", pm));
    if (iabs(am - 40000) < 200) n_amp_lock++;
    if (iabs(wrap18(pm - 20000)) < 200) n_phs_lock++;
    check(rf_permit, "interlock tripped in normal operation");
    for (int k = 0; k < 8; k++) begin
      @(negedge eth_clk); list_addr = 3'(k); @(negedge eth_clk); @(negedge eth_clk);
      if (k == 0) begin
        check(list_data[35:18] > 14000 && list_data[35:18] < 24000, $sformatf("list amp ch0 %0d", list_data[35:18]));
        if (list_data[35:18] > 14000) n_list++;
      end
    end
    @(negedge clk);

    // ---- C. network analyzer excitation on the amplitude setpoint ----
    amin = 1 << 30; amax = 0;
    for (int k = 0; k < 1024; k++) begin
      if (int'(dut.amp_meas) < amin) amin = int'(dut.amp_meas);
      if (int'(dut.amp_meas) > amax) amax = int'(dut.amp_meas);
      cycles(1);
    end
    t0 = amax - amin;
    wr(8'h0c, 32'h0080_0000);               // period 512 cycles
    wr(8'h0d, 32'd3000);
    wr(8'h00, 32'h0b);                      // loops closed, excitation on amplitude
    cycles(2000);
    amin = 1 << 30; amax = 0;
    for (int k = 0; k < 1024; k++) begin
      if (int'(dut.amp_meas) < amin) amin = int'(dut.amp_meas);
      if (int'(dut.amp_meas) > amax) amax = int'(dut.amp_meas);
      cycles(1);
    end
    check(amax - amin > 2000 && t0 < 400, $sformatf("excitation swing %0d (quiet %0d)", amax - amin, t0));
    if (amax - amin > 2000) n_netan++;
    wr(8'h00, 32'h03); cycles(2000);

    // ---- D. phase ramp on a timing event ----
    rd(8'h87, d); sp0 = sgn18(d);
    wr(8'h0e, 32'h11); wr(8'h0f, 32'd100); wr(8'h10, 32'd40000); wr(8'h11, 32'd50);
    wr(8'h12, 32'd400); wr(8'h13, 32'd100000);
    wr(8'h00, 32'h23);                      // ramp enabled
    evr_code = 8'h11; evr_valid = 1; cycles(1); evr_valid = 0;
    cycles(5);
    rd(8'h80, d); check(d[0], "ramp not busy after event");
    wr(8'h02, 32'd5);                       // ignored while busy
    wait (!dut.ramp_busy); cycles(2000);
    rd(8'h80, d);
    check(d[1] && !d[2], $sformatf("ramp flags %b", d[2:0]));
    if (d[1] && !d[2]) n_ramp++;
    rd(8'h87, d);
    check(sgn18(d) == wrap18(sp0 + 2000000), $sformatf("ramp end setpoint %0d exp %0d", sgn18(d), wrap18(sp0 + 2000000)));
    rd(8'h86, d); pm = sgn18(d);
    check(iabs(wrap18(pm - wrap18(sp0 + 2000000))) < 200, $sformatf("phase after ramp %0d", pm));

    // ---- E. waveform buffer ----
    wr(8'h09, 32'd4); wr(8'h0a, 32'd4);
    cycles(9000);
    wr(8'h00, 32'h43);                      // trigger
    cycles(20);
    check(wave_ready, "waveform not ready after trigger");
    begin
      int ch_prev, ok, nf;
      real w [4], a0, a1;
      ok = 1; nf = 0; a0 = 0.0; a1 = 0.0;
      for (int k = 0; k < 256; k++) begin
        @(negedge eth_clk); wave_raddr = 11'(k); @(negedge eth_clk); @(negedge eth_clk);
        if (k > 0 && wave_rdata[21:18] != 4'(ch_prev + 1)) ok = 0;
        ch_prev = int'(wave_rdata[21:18]);
        if (ch_prev < 4) w[ch_prev] = real'($signed(wave_rdata[17:0]));
        if (ch_prev == 3) begin
          a0 += $sqrt(w[0] * w[0] + w[1] * w[1]);
          a1 += $sqrt(w[2] * w[2] + w[3] * w[3]);
          nf++;
        end
      end
      a0 /= nf; a1 /= nf;
      // probe tone ~12450 (40000 / 3.214); mixer scale 60000/2^16 = 0.916
      check(a0 > 9000.0 && a0 < 14000.0, $sformatf("waveform ADC0 baseband amplitude %.0f, expected about 11400", a0));
      check(a1 / a0 > 0.48 && a1 / a0 < 0.52, $sformatf("waveform ADC1/ADC0 ratio %.3f, expected 0.5", a1 / a0));
      check(ok == 1, "waveform channel sequence broken");
      if (ok == 1 && wave_ready) n_wave++;
      @(negedge eth_clk); wave_read_done = 1; @(negedge eth_clk); wave_read_done = 0;
      @(negedge eth_clk); @(negedge eth_clk);
      check(!wave_ready, "waveform not released");
    end
    @(negedge clk);

    // ---- F. amplitude interlock ----
    wr(8'h01, 32'd80000);
    t0 = cyc;
    wait (!rf_permit);
    cycles(3);
    check(dac == 0, "DAC not off after interlock");
    if (dac == 0) n_dac_off++;
    rd(8'h81, d);
    check(d == 32'h1, $sformatf("first fault %h", d));
    if (d == 32'h1) n_inlk_amp++;
    wr(8'h00, 32'h0); wr(8'h01, 32'd16000); cycles(100);
    wr(8'h00, 32'h4); cycles(400);           // interlock reset, loops open
    check(rf_permit, "permit not back after reset");
    // interlock latency: open-loop drive step; from the first probe sample
    // above the threshold's amplitude (28000/1.507) to the permit removal
    t1 = -1;
    wr(8'h01, 32'd40000);
    for (int k = 0; k < 600 && rf_permit; k++) begin
      if (t1 < 0 && iabs(int'(adc[0])) > 18580) t1 = cyc;
      cycles(1);
    end
    lat = cyc - t1;
    $display("interlock latency %0d cycles", lat);
    check(!rf_permit && t1 > 0 && lat <= 114, $sformatf("interlock latency %0d cycles, limit 114 (1 us)", lat));
    if (!rf_permit) n_inlk_step++;
    wr(8'h01, 32'd16000); cycles(100);
    wr(8'h00, 32'h4); cycles(400);
    check(rf_permit, "permit not back after second reset");
    wr(8'h00, 32'h3); wr(8'h01, 32'd40000); cycles(6000);
    rd(8'h85, d);
    check(iabs(int'(d) - 40000) < 200, $sformatf("amplitude after recovery %0d", d));

    // ---- G. ARC detector ----
    arc[1] = 1; cycles(5);
    check(!rf_permit, "ARC did not trip");
    rd(8'h81, d);
    check(d == 32'h20000, $sformatf("ARC first fault %h", d));
    if (d == 32'h20000) n_arc++;
    arc[1] = 0; wr(8'h00, 32'h4); cycles(20);
    check(rf_permit, "permit not back after ARC reset");

    // ---- H. bus collision ----
    cpu_valid = 1; cpu_we = 0; cpu_addr = 8'h01;
    udp_valid = 1; udp_we = 0; udp_addr = 8'h02; @(negedge clk);
    udp_valid = 0;
    while (!cpu_ready) @(negedge clk);
    @(negedge clk); cpu_valid = 0;
    @(negedge clk); @(negedge clk);
    check(cpu_rdata == 32'd40000, $sformatf("cpu read after collision %0d", cpu_rdata));

    // ---- mechanism summary ----
    $display("mechanisms: open=%0d latency=%0d amp_lock=%0d phs_lock=%0d netan=%0d ramp=%0d wrap=%0d slew=%0d cic=%0d wave=%0d list=%0d inlk_amp=%0d inlk_step=%0d dac_off=%0d arc=%0d busconf=%0d",
             n_open, n_latency, n_amp_lock, n_phs_lock, n_netan, n_ramp, n_wrap, n_slew, n_cic, n_wave, n_list,
             n_inlk_amp, n_inlk_step, n_dac_off, n_arc, n_busconf);
    check(n_open > 0, "open loop never happened");
    check(n_latency > 0, "latency never measured");
    check(n_amp_lock > 0, "amplitude lock never happened");
    check(n_phs_lock > 0, "phase lock never happened");
    check(n_netan > 0, "excitation never happened");
    check(n_ramp > 0, "ramp never happened");
    check(n_wrap > 0, "phase wrap never happened");
    check(n_slew > 0, "slew limiting never happened");
    check(n_cic > 0, "CIC output never happened");
    check(n_wave > 0, "waveform capture never happened");
    check(n_list > 0, "amp/phs list never read");
    check(n_inlk_amp > 0, "amplitude interlock never happened");
    check(n_inlk_step > 0, "interlock latency step never tripped");
    check(n_dac_off > 0, "DAC disable never happened");
    check(n_arc > 0, "ARC interlock never happened");
    check(n_busconf > 0, "bus collision never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
