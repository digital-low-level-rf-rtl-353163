// fast_interlock: fast RF power / phase interlock with first-fault capture.
//
// Input is the serial baseband stream of the static CIC filter: stream 2k is
// I and stream 2k+1 is Q of channel k ("IQIQ...").  The demultiplexer keeps
// the I word and, when the matching Q word arrives, issues the pair to a
// vectoring CORDIC.  Twenty cycles later amplitude and phase of channel k
// are compared with that channel's thresholds:
//   amplitude against amp_lo / amp_hi, phase against phs_lo / phs_hi,
//   each in its own mode: OFF, HIGH (trip above hi), LOW (trip below lo) or
//   WINDOW (trip outside [lo, hi]).
// Fault sources are numbered: amplitude of channel k = bit k, phase of
// channel k = bit NCH+k, ARC detector j = bit 2*NCH+j.  inlk_status shows
// the present state of every source; sources enabled by 'mask' set
// inlk_latch, which stays set until 'inlk_reset'.  The cycle that first sets
// the latch stores the tripping sources in first_fault and, when a channel
// comparison tripped, its amplitude and phase in fault_amp / fault_phs.
// rf_permit = !inlk_latch disables the DAC.  Every amplitude/phase result is
// also written, by channel, into a dual-port RAM that is read on the
// Ethernet clock (list_clk) as the "amp/phs list".
//
// Timing: inlk_latch rises 21 cycles after the Q word of a tripping channel
// enters, or 3 cycles after an ARC input rises (two synchronizer flops).
// The structure (demux, CORDIC, amplitude and phase compare, ARC inputs,
// first-fault detection, reset/mask/mode, dual-port RAM) follows the paper's
// interlock figure; encodings, source numbering and widths are this design's.
// Amplitudes and thresholds are in CORDIC output units (1.6468*|IQ|);
// amplitudes are never negative, so the top bit of fault_amp stays 0.
module fast_interlock
  import llrf_pkg::inlk_chan_cfg_t, llrf_pkg::cmp_mode_e, llrf_pkg::CMP_HIGH,
         llrf_pkg::CMP_LOW, llrf_pkg::CMP_WINDOW, llrf_pkg::CORDIC_VECTOR;
#(
  parameter int NCH   = 8,
  parameter int N_ARC = 2,
  parameter int DW    = 18,
  parameter int PW    = 18,
  localparam int CHW  = $clog2(2 * NCH),
  localparam int NSRC = 2 * NCH + N_ARC,
  localparam int LAW  = $clog2(NCH)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [DW-1:0] din,
  input  logic                 dvalid,
  input  logic [CHW-1:0]       dchan,
  input  logic [N_ARC-1:0]     arc,
  input  inlk_chan_cfg_t       chan_cfg [NCH],
  input  logic [NSRC-1:0]      mask,
  input  logic                 inlk_reset,
  output logic [NSRC-1:0]      inlk_status,
  output logic [NSRC-1:0]      first_fault,
  output logic                 inlk_latch,
  output logic [DW-1:0]        fault_amp,
  output logic signed [PW-1:0] fault_phs,
  output logic                 rf_permit,
  input  logic                 list_clk,
  input  logic [LAW-1:0]       list_addr,
  output logic [DW+PW-1:0]     list_data
);

  localparam int LAT = 20;   // CORDIC latency

  // ---- demultiplexer ----
  logic signed [DW-1:0] i_hold;
  logic                 issue;
  assign issue = dvalid && dchan[0];

  always_ff @(posedge clk) begin
    if (rst)                      i_hold <= '0;
    else if (dvalid && !dchan[0]) i_hold <= din;
  end

  // ---- CORDIC, with valid and channel carried alongside ----
  logic signed [DW-1:0] amp_s, unused_y;
  logic signed [PW-1:0] phs;
  logic [LAT-1:0]       vpipe;
  logic [LAW-1:0]       cpipe [LAT];

  cordicg_b22 #(.DW(DW), .PW(PW)) u_cordic (
    .clk(clk), .op(CORDIC_VECTOR), .xin(i_hold), .yin(din), .zin('0),
    .xout(amp_s), .yout(unused_y), .zout(phs));

  always_ff @(posedge clk) begin
    if (rst) vpipe <= '0;
    else     vpipe <= {vpipe[LAT-2:0], issue};
    cpipe[0] <= LAW'(dchan >> 1);
    for (int k = 1; k < LAT; k++) cpipe[k] <= cpipe[k-1];
  end

  logic           rvalid;
  logic [LAW-1:0] rch;
  logic [DW-1:0]  amp;
  assign rvalid = vpipe[LAT-1];
  assign rch    = cpipe[LAT-1];
  assign amp    = amp_s[DW-1] ? '0 : amp_s;       // amplitude is never negative

  // ---- comparisons ----
  function automatic logic trip_u(cmp_mode_e m, logic [DW-1:0] v, logic [DW-1:0] lo, logic [DW-1:0] hi);
    case (m)
      CMP_HIGH:   return v > hi;
      CMP_LOW:    return v < lo;
      CMP_WINDOW: return (v > hi) || (v < lo);
      default:    return 1'b0;
    endcase
  endfunction

  function automatic logic trip_s(cmp_mode_e m, logic signed [PW-1:0] v, logic signed [PW-1:0] lo,
                                  logic signed [PW-1:0] hi);
    case (m)
      CMP_HIGH:   return v > hi;
      CMP_LOW:    return v < lo;
      CMP_WINDOW: return (v > hi) || (v < lo);
      default:    return 1'b0;
    endcase
  endfunction

  inlk_chan_cfg_t cc;
  logic           amp_trip, phs_trip;
  assign cc       = chan_cfg[rch];
  assign amp_trip = trip_u(cc.amp_mode, amp, cc.amp_lo, cc.amp_hi);
  assign phs_trip = trip_s(cc.phs_mode, phs, cc.phs_lo, cc.phs_hi);

  // ---- ARC inputs: two-flop synchronizer ----
  logic [N_ARC-1:0] arc_s1, arc_s2;
  always_ff @(posedge clk) begin
    arc_s1 <= arc;
    arc_s2 <= arc_s1;
  end

  // ---- status, latch and first fault ----
  logic [NSRC-1:0] status_n, trip_n;
  int unsigned     ia, ip;             // source numbers of the result's channel
  assign ia = int'(rch);
  assign ip = NCH + int'(rch);
  always_comb begin
    status_n = inlk_status;
    if (rvalid) begin
      status_n[ia] = amp_trip;
      status_n[ip] = phs_trip;
    end
    status_n[2*NCH +: N_ARC] = arc_s2;
    trip_n = status_n & mask;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      inlk_status <= '0;
      inlk_latch  <= 1'b0;
      first_fault <= '0;
      fault_amp   <= '0;
      fault_phs   <= '0;
    end else begin
      inlk_status <= status_n;
      if (inlk_reset) begin
        inlk_latch  <= 1'b0;
        first_fault <= '0;
        fault_amp   <= '0;
        fault_phs   <= '0;
      end else if (!inlk_latch && |trip_n) begin
        inlk_latch  <= 1'b1;
        first_fault <= trip_n;
        if (rvalid && (trip_n[ia] || trip_n[ip])) begin
          fault_amp <= amp;
          fault_phs <= phs;
        end
      end
    end
  end

  assign rf_permit = !inlk_latch;

  // ---- amplitude / phase list, read on the Ethernet clock ----
  dpram #(.AW(LAW), .DW(DW + PW)) u_list (
    .wclk(clk), .we(rvalid), .waddr(rch), .wdata({amp, phs}),
    .rclk(list_clk), .raddr(list_addr), .rdata(list_data));

endmodule
