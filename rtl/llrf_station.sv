// llrf_station: DSP firmware of one LLRF station (top level).
//
// Feedback path (cavity probe = ADC channel 0):
//   fwashout (2) -> fdownconvert (8) -> fiq_interp (3) -> CORDIC IQ->AP (20)
//   -> pi_scalar amplitude / pi_scalar phase (4) -> CORDIC AP->IQ (20)
//   -> flevel_set (3) -> DAC, through one output register that forces the
//   DAC to zero when the interlock has removed the RF permit.
// The numbers are the per-block delays of the paper's DSP figure: 60 cycles
// plus the output register.  (The paper's text quotes 50 cycles / 436 ns
// for the whole core; the figure's per-block values are the ones built.)
// The amplitude setpoint comes from the register bank, the phase setpoint
// from the phase-ramp state machine; the network-analyzer excitation is
// added to one of them.  The phase loop uses phase wrapping.
//
// Waveform and interlock path (all eight ADC channels):
//   digital LO -> iq_mixer -> mux_serializer (strobe every samp_per cycles)
//   -> dynamic CIC (decimation/shift from registers) -> circ_buf (read on
//      eth_clk)
//   -> static CIC (decimation STATIC_DECIM, fixed shift) -> fast_interlock
//      (ARC inputs, amp/phs list read on eth_clk) -> RF permit.
//
// One digital LO (4/11 of the sample rate) serves the down-converter, the
// up-converter and the mixers.  The ramp's lock status is "phase loop closed
// and RF permitted".  Parts outside this module: the local-bus masters (UDP
// engine, soft CPU), the timing receiver (event-code stream) and the
// converter interfaces (deserialized ADC words in, DAC word out).
// Start-up: the datapath registers have no reset, so for WARMUP cycles
// after reset (longer than any pipeline or filter fill) the DAC is held at
// zero and the interlock is held in reset; this is this design's choice.
// Clocks: clk is the ADC sample clock (RF domain); eth_clk only clocks the
// read ports of the waveform buffer and of the amp/phs list.
module llrf_station
  import llrf_pkg::*;
#(
  parameter int STATIC_DECIM = 2,
  parameter int STATIC_SHIFT = 2,
  parameter int WAVE_AW      = 11,
  parameter int WARMUP       = 255
) (
  input  logic                     clk,
  input  logic                     rst,
  // converters
  input  logic signed [ADC_W-1:0]  adc [N_ADC],
  output logic signed [DAC_W-1:0]  dac,
  // machine protection and timing
  input  logic [N_ARC-1:0]         arc,
  output logic                     rf_permit,
  input  logic [7:0]               evr_code,
  input  logic                     evr_valid,
  // local bus: UDP master (priority) and CPU master
  input  logic                     udp_valid,
  input  logic                     udp_we,
  input  logic [7:0]               udp_addr,
  input  logic [31:0]              udp_wdata,
  output logic                     udp_rvalid,
  output logic [31:0]              udp_rdata,
  input  logic                     cpu_valid,
  input  logic                     cpu_we,
  input  logic [7:0]               cpu_addr,
  input  logic [31:0]              cpu_wdata,
  output logic                     cpu_ready,
  output logic                     cpu_rvalid,
  output logic [31:0]              cpu_rdata,
  // Ethernet-clock read ports
  input  logic                     eth_clk,
  input  logic                     eth_rst,
  input  logic [WAVE_AW-1:0]       wave_raddr,
  output logic [4+DW-1:0]          wave_rdata,
  output logic                     wave_ready,
  input  logic                     wave_read_done,
  input  logic [2:0]               list_addr,
  output logic [DW+PW-1:0]         list_data
);

  llrf_cfg_t      cfg;
  inlk_chan_cfg_t inlk_cfg [N_ADC];
  llrf_stat_t     stat;

  llrf_regs u_regs (
    .clk, .rst,
    .udp_valid, .udp_we, .udp_addr, .udp_wdata, .udp_rvalid, .udp_rdata,
    .cpu_valid, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_ready, .cpu_rvalid, .cpu_rdata,
    .cfg, .inlk_cfg, .stat);

  // ---------------- digital LO ----------------
  logic signed [DW-1:0] lo_cos, lo_sin;
  digital_lo #(.DW(DW), .PW(PW), .LO_NUM(LO_NUM), .LO_DEN(LO_DEN)) u_lo (
    .clk, .rst, .lo_cos, .lo_sin);

  // ---------------- feedback path ----------------
  logic signed [ADC_W-1:0] probe;
  logic signed [DW-1:0]    iq, i_bb, q_bb;
  logic                    iq_sel;
  logic signed [DW-1:0]    amp_meas, unused_y1;
  logic signed [PW-1:0]    phs_meas;

  fwashout #(.W(ADC_W)) u_washout (.clk, .rst, .din(adc[0]), .dout(probe));
  fdownconvert #(.W(ADC_W), .DW(DW)) u_down (
    .clk, .rst, .adc(probe), .lo_cos, .lo_sin, .iq, .iq_sel);
  fiq_interp #(.DW(DW)) u_demux (.clk, .iq, .iq_sel, .i_out(i_bb), .q_out(q_bb));
  cordicg_b22 #(.DW(DW), .PW(PW)) u_iq2ap (
    .clk, .op(CORDIC_VECTOR), .xin(i_bb), .yin(q_bb), .zin('0),
    .xout(amp_meas), .yout(unused_y1), .zout(phs_meas));

  // setpoints: register / ramp, plus network-analyzer excitation
  logic signed [PW-1:0] ramp_sp;
  logic                 ramp_busy, ramp_done, ramp_fault;
  logic signed [DW-1:0] exc_amp, exc_phs, amp_sp, phs_sp;

  phase_ramp #(.PW(PW)) u_ramp (
    .clk, .rst, .evr_code, .evr_valid, .cfg(cfg.ramp),
    .sp_load(cfg.phs_sp_load), .sp_base(cfg.phs_sp),
    .locked(cfg.phs_close && rf_permit),
    .phase_sp(ramp_sp), .busy(ramp_busy), .done(ramp_done), .fault(ramp_fault));

  netan_exc #(.DW(DW), .PW(PW)) u_netan (
    .clk, .rst, .en(cfg.netan_en), .sel(cfg.netan_sel), .freq(cfg.netan_freq),
    .amp(cfg.netan_amp), .exc_amp, .exc_phs);

  always_ff @(posedge clk) begin
    amp_sp <= cfg.amp_sp + exc_amp;          // saturation left to register settings
    phs_sp <= ramp_sp + exc_phs;             // phase wraps modulo a turn
  end

  logic signed [DW-1:0] drive_a, drive_p;
  pi_scalar #(.DW(DW)) u_pi_amp (
    .clk, .rst, .setpoint(amp_sp), .measured(amp_meas), .kp(cfg.amp_kp), .ki(cfg.amp_ki),
    .slew_max(cfg.amp_slew), .wrap_en(1'b0), .close_loop(cfg.amp_close), .drive(drive_a));
  pi_scalar #(.DW(DW)) u_pi_phs (
    .clk, .rst, .setpoint(phs_sp), .measured(phs_meas), .kp(cfg.phs_kp), .ki(cfg.phs_ki),
    .slew_max(cfg.phs_slew), .wrap_en(1'b1), .close_loop(cfg.phs_close), .drive(drive_p));

  logic signed [DW-1:0] drv_i, drv_q;
  logic signed [PW-1:0] unused_z2;
  cordicg_b22 #(.DW(DW), .PW(PW)) u_ap2iq (
    .clk, .op(CORDIC_ROTATE), .xin(drive_a), .yin('0), .zin(drive_p),
    .xout(drv_i), .yout(drv_q), .zout(unused_z2));

  logic signed [DAC_W-1:0] dac_raw;
  flevel_set #(.DW(DW), .DAC_W(DAC_W)) u_up (
    .clk, .i_in(drv_i), .q_in(drv_q), .lo_cos, .lo_sin, .dac(dac_raw));

  logic [$clog2(WARMUP+1)-1:0] warm_cnt;
  logic                        warm;
  assign warm = warm_cnt != 0;
  always_ff @(posedge clk) begin
    if (rst)       warm_cnt <= ($clog2(WARMUP+1))'(WARMUP);
    else if (warm) warm_cnt <= warm_cnt - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst || warm || !rf_permit) dac <= '0;
    else                           dac <= dac_raw;
  end

  // ---------------- waveform and interlock path ----------------
  logic signed [DW-1:0] mix_i [N_ADC], mix_q [N_ADC], streams [2*N_ADC];
  iq_mixer #(.N(N_ADC), .W(ADC_W), .DW(DW)) u_mix (
    .clk, .adc, .lo_cos, .lo_sin, .i_out(mix_i), .q_out(mix_q));
  always_comb
    for (int k = 0; k < N_ADC; k++) begin
      streams[2*k]   = mix_i[k];
      streams[2*k+1] = mix_q[k];
    end

  logic [15:0] samp_cnt;
  logic        sample;
  always_ff @(posedge clk) begin
    if (rst || samp_cnt == 0) samp_cnt <= (cfg.samp_per < 16) ? 16'd15 : cfg.samp_per - 1'b1;
    else                      samp_cnt <= samp_cnt - 1'b1;
  end
  assign sample = !rst && (samp_cnt == 0);

  logic signed [DW-1:0] ser_d;
  logic                 ser_v;
  logic [3:0]           ser_c;
  mux_serializer #(.NS(2 * N_ADC), .DW(DW)) u_ser (
    .clk, .rst, .sample, .din(streams), .dout(ser_d), .dvalid(ser_v), .dchan(ser_c));

  logic signed [DW-1:0] wcic_d, scic_d;
  logic                 wcic_v, scic_v;
  logic [3:0]           wcic_c, scic_c;
  cic_multi #(.NCH(2 * N_ADC), .DW(DW)) u_cic_dyn (
    .clk, .rst, .decim(cfg.wave_decim), .shift(cfg.wave_shift),
    .din(ser_d), .dvalid(ser_v), .dchan(ser_c), .dout(wcic_d), .ovalid(wcic_v), .ochan(wcic_c));
  cic_multi #(.NCH(2 * N_ADC), .DW(DW)) u_cic_static (
    .clk, .rst, .decim(12'(STATIC_DECIM)), .shift(6'(STATIC_SHIFT)),
    .din(ser_d), .dvalid(ser_v), .dchan(ser_c), .dout(scic_d), .ovalid(scic_v), .ochan(scic_c));

  logic wave_pending;
  circ_buf #(.AW(WAVE_AW), .DW(DW), .CHW(4)) u_wave (
    .wclk(clk), .wrst(rst), .din(wcic_d), .dchan(wcic_c), .dvalid(wcic_v),
    .trigger(cfg.wave_trig), .pending(wave_pending),
    .rclk(eth_clk), .rrst(eth_rst), .raddr(wave_raddr), .rdata(wave_rdata),
    .ready(wave_ready), .read_done(wave_read_done));

  logic [NSRC-1:0]      inlk_status, first_fault;
  logic                 inlk_latch;
  logic [DW-1:0]        fault_amp;
  logic signed [PW-1:0] fault_phs;
  fast_interlock #(.NCH(N_ADC), .N_ARC(N_ARC), .DW(DW), .PW(PW)) u_inlk (
    .clk, .rst, .din(scic_d), .dvalid(scic_v), .dchan(scic_c), .arc,
    .chan_cfg(inlk_cfg), .mask(cfg.inlk_mask), .inlk_reset(cfg.inlk_reset || warm),
    .inlk_status, .first_fault, .inlk_latch, .fault_amp, .fault_phs, .rf_permit,
    .list_clk(eth_clk), .list_addr, .list_data);

  // ---------------- status ----------------
  always_comb begin
    stat.amp_meas     = amp_meas;
    stat.phs_meas     = phs_meas;
    stat.phase_sp     = ramp_sp;
    stat.ramp_busy    = ramp_busy;
    stat.ramp_done    = ramp_done;
    stat.ramp_fault   = ramp_fault;
    stat.inlk_latch   = inlk_latch;
    stat.inlk_status  = inlk_status;
    stat.first_fault  = first_fault;
    stat.fault_amp    = fault_amp;
    stat.fault_phs    = fault_phs;
    stat.wave_pending = wave_pending;
  end

endmodule
