// llrf_regs: local bus arbitration and the DSP register bank.
//
// Two bus masters reach the DSP registers: the UDP engine (Ethernet, used by
// the EPICS IOC for real-time access) and the soft CPU (which serves the
// PLC over Modbus RTU).  The UDP master has priority: a UDP access is always
// taken in the cycle it is presented; a CPU access is taken only in a cycle
// without a UDP access, and cpu_ready tells the CPU when its access was
// taken (it holds the request until then).  Both masters are assumed to be
// on the DSP clock; the clock-domain crossing of the CPU bus happens outside.
//
// Bus: valid, we, 8-bit word address, 32-bit data.  A write takes effect at
// the end of the cycle it is taken; a read returns rdata with rvalid to the
// master that issued it two cycles later.  Words are right-aligned and sign
// extended on read where signed.
//
// Register map (word address):
//   0x00 control  b0 amp loop closed, b1 phase loop closed, b2 interlock
//                 reset (pulse), b3 network analyzer on, b4 its target (0 amp,
//                 1 phase), b5 ramp enable, b6 waveform trigger (pulse)
//   0x01 amplitude setpoint     0x02 phase setpoint (load pulse on write)
//   0x03/0x04 amplitude Kp/Ki   0x05/0x06 phase Kp/Ki
//   0x07/0x08 amplitude/phase slew limit
//   0x09 waveform CIC decimation   0x0a waveform CIC shift
//   0x0b interlock source mask     0x0c excitation frequency word
//   0x0d excitation amplitude      0x0e ramp event code
//   0x0f ramp delay   0x10 ramp step   0x11 ramp steps
//   0x12 ramp period  0x13 ramp timeout  0x14 waveform sample period
//   0x20+4k..0x23+4k  interlock channel k: amp lo, amp hi, phase lo, phase hi
//   0x40+k  interlock channel k modes: b1:0 amplitude, b3:2 phase
//   read only: 0x80 flags {wave_pending, inlk_latch, ramp fault, done, busy}
//   0x81 first_fault 0x82 inlk_status 0x83 fault_amp 0x84 fault_phs
//   0x85 measured amplitude 0x86 measured phase 0x87 ramp phase setpoint
// Reset values: loops open, all gains zero, interlock mask all enabled,
// sample period 16, decimation 1, thresholds zero and modes OFF.
// The two masters and the UDP priority follow the paper; the bus protocol
// and the register map are this design's.
module llrf_regs
  import llrf_pkg::*;
#(
  parameter int AW = 8
) (
  input  logic              clk,
  input  logic              rst,
  // UDP master (priority)
  input  logic              udp_valid,
  input  logic              udp_we,
  input  logic [AW-1:0]     udp_addr,
  input  logic [31:0]       udp_wdata,
  output logic              udp_rvalid,
  output logic [31:0]       udp_rdata,
  // CPU master
  input  logic              cpu_valid,
  input  logic              cpu_we,
  input  logic [AW-1:0]     cpu_addr,
  input  logic [31:0]       cpu_wdata,
  output logic              cpu_ready,
  output logic              cpu_rvalid,
  output logic [31:0]       cpu_rdata,
  // DSP side
  output llrf_cfg_t         cfg,
  output inlk_chan_cfg_t    inlk_cfg [N_ADC],
  input  llrf_stat_t        stat
);

  // ---- arbitration ----
  logic          a_valid, a_we, a_udp;
  logic [AW-1:0] a_addr;
  logic [31:0]   a_wdata;

  always_comb begin
    a_udp     = udp_valid;
    a_valid   = udp_valid || cpu_valid;
    a_we      = udp_valid ? udp_we    : cpu_we;
    a_addr    = udp_valid ? udp_addr  : cpu_addr;
    a_wdata   = udp_valid ? udp_wdata : cpu_wdata;
    cpu_ready = cpu_valid && !udp_valid;
  end

  // ---- writes ----
  always_ff @(posedge clk) begin
    if (rst) begin
      cfg <= '0;
      cfg.inlk_mask  <= '1;
      cfg.samp_per   <= 16'd16;
      cfg.wave_decim <= 12'd1;
      for (int k = 0; k < N_ADC; k++) inlk_cfg[k] <= '0;
    end else begin
      cfg.phs_sp_load <= 1'b0;
      cfg.wave_trig   <= 1'b0;
      cfg.inlk_reset  <= 1'b0;
      if (a_valid && a_we) begin
        case (a_addr) inside
          8'h00: begin
            cfg.amp_close   <= a_wdata[0];
            cfg.phs_close   <= a_wdata[1];
            cfg.inlk_reset  <= a_wdata[2];
            cfg.netan_en    <= a_wdata[3];
            cfg.netan_sel   <= a_wdata[4];
            cfg.ramp.enable <= a_wdata[5];
            cfg.wave_trig   <= a_wdata[6];
          end
          8'h01: cfg.amp_sp     <= DW'(a_wdata);
          8'h02: begin cfg.phs_sp <= PW'(a_wdata); cfg.phs_sp_load <= 1'b1; end
          8'h03: cfg.amp_kp     <= 18'(a_wdata);
          8'h04: cfg.amp_ki     <= 18'(a_wdata);
          8'h05: cfg.phs_kp     <= 18'(a_wdata);
          8'h06: cfg.phs_ki     <= 18'(a_wdata);
          8'h07: cfg.amp_slew   <= (DW-1)'(a_wdata);
          8'h08: cfg.phs_slew   <= (DW-1)'(a_wdata);
          8'h09: cfg.wave_decim <= 12'(a_wdata);
          8'h0a: cfg.wave_shift <= 6'(a_wdata);
          8'h0b: cfg.inlk_mask  <= NSRC'(a_wdata);
          8'h0c: cfg.netan_freq <= a_wdata;
          8'h0d: cfg.netan_amp  <= (DW-1)'(a_wdata);
          8'h0e: cfg.ramp.event_code <= 8'(a_wdata);
          8'h0f: cfg.ramp.delay  <= 24'(a_wdata);
          8'h10: cfg.ramp.step   <= PW'(a_wdata);
          8'h11: cfg.ramp.steps  <= 16'(a_wdata);
          8'h12: cfg.ramp.period <= 24'(a_wdata);
          8'h13: cfg.ramp.timeout <= a_wdata;
          8'h14: cfg.samp_per   <= 16'(a_wdata);
          [8'h20:8'h3f]: begin
            case (a_addr[1:0])
              2'd0: inlk_cfg[a_addr[4:2]].amp_lo <= DW'(a_wdata);
              2'd1: inlk_cfg[a_addr[4:2]].amp_hi <= DW'(a_wdata);
              2'd2: inlk_cfg[a_addr[4:2]].phs_lo <= PW'(a_wdata);
              default: inlk_cfg[a_addr[4:2]].phs_hi <= PW'(a_wdata);
            endcase
          end
          [8'h40:8'h47]: begin
            inlk_cfg[a_addr[2:0]].amp_mode <= cmp_mode_e'(a_wdata[1:0]);
            inlk_cfg[a_addr[2:0]].phs_mode <= cmp_mode_e'(a_wdata[3:2]);
          end
          default: ;
        endcase
      end
    end
  end

  // ---- reads: two-cycle latency ----
  function automatic logic [31:0] sx(input logic signed [17:0] v);
    return 32'(v);
  endfunction

  logic          r1_valid, r1_udp;
  logic [AW-1:0] r1_addr;
  logic [31:0]   rd;

  always_comb begin
    rd = '0;
    case (r1_addr) inside
      8'h00: rd = {25'd0, 1'b0, cfg.ramp.enable, cfg.netan_sel, cfg.netan_en, 1'b0, cfg.phs_close, cfg.amp_close};
      8'h01: rd = sx(cfg.amp_sp);
      8'h02: rd = sx(cfg.phs_sp);
      8'h03: rd = sx(cfg.amp_kp);
      8'h04: rd = sx(cfg.amp_ki);
      8'h05: rd = sx(cfg.phs_kp);
      8'h06: rd = sx(cfg.phs_ki);
      8'h07: rd = 32'(cfg.amp_slew);
      8'h08: rd = 32'(cfg.phs_slew);
      8'h09: rd = 32'(cfg.wave_decim);
      8'h0a: rd = 32'(cfg.wave_shift);
      8'h0b: rd = 32'(cfg.inlk_mask);
      8'h0c: rd = cfg.netan_freq;
      8'h0d: rd = 32'(cfg.netan_amp);
      8'h0e: rd = 32'(cfg.ramp.event_code);
      8'h0f: rd = 32'(cfg.ramp.delay);
      8'h10: rd = sx(cfg.ramp.step);
      8'h11: rd = 32'(cfg.ramp.steps);
      8'h12: rd = 32'(cfg.ramp.period);
      8'h13: rd = cfg.ramp.timeout;
      8'h14: rd = 32'(cfg.samp_per);
      [8'h20:8'h3f]: begin
        case (r1_addr[1:0])
          2'd0: rd = 32'(inlk_cfg[r1_addr[4:2]].amp_lo);
          2'd1: rd = 32'(inlk_cfg[r1_addr[4:2]].amp_hi);
          2'd2: rd = sx(inlk_cfg[r1_addr[4:2]].phs_lo);
          default: rd = sx(inlk_cfg[r1_addr[4:2]].phs_hi);
        endcase
      end
      [8'h40:8'h47]: rd = {28'd0, inlk_cfg[r1_addr[2:0]].phs_mode, inlk_cfg[r1_addr[2:0]].amp_mode};
      8'h80: rd = {27'd0, stat.wave_pending, stat.inlk_latch, stat.ramp_fault, stat.ramp_done, stat.ramp_busy};
      8'h81: rd = 32'(stat.first_fault);
      8'h82: rd = 32'(stat.inlk_status);
      8'h83: rd = 32'(stat.fault_amp);
      8'h84: rd = sx(stat.fault_phs);
      8'h85: rd = 32'(stat.amp_meas);
      8'h86: rd = sx(stat.phs_meas);
      8'h87: rd = sx(stat.phase_sp);
      default: rd = 32'hdead_beef;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      r1_valid <= 1'b0; r1_udp <= 1'b0; r1_addr <= '0;
      udp_rvalid <= 1'b0; cpu_rvalid <= 1'b0; udp_rdata <= '0; cpu_rdata <= '0;
    end else begin
      r1_valid   <= a_valid && !a_we;
      r1_udp     <= a_udp;
      r1_addr    <= a_addr;
      udp_rvalid <= r1_valid && r1_udp;
      cpu_rvalid <= r1_valid && !r1_udp;
      if (r1_valid && r1_udp)  udp_rdata <= rd;
      if (r1_valid && !r1_udp) cpu_rdata <= rd;
    end
  end

  // Bus rule for the CPU master: a stalled request stays unchanged until it
  // is taken.
  a_cpu_hold: assert property (@(posedge clk) disable iff (rst)
    (cpu_valid && !cpu_ready) |=> (cpu_valid && $stable(cpu_we) && $stable(cpu_addr) && $stable(cpu_wdata)))
    else $error("CPU bus request changed while stalled");

endmodule
