// llrf_pkg: constants and types shared by the LLRF station DSP.
//
// The converter widths (16-bit ADC and DAC), the eight ADC channels and the
// non-IQ ratio f_IF/f_S = 4/11 follow the system description.  The 18-bit
// internal data width, the 18-bit phase word (full turn = 2^18) and all
// encodings below are choices of this design.
package llrf_pkg;

  localparam int ADC_W  = 16;   // ADC sample width
  localparam int DAC_W  = 16;   // DAC sample width
  localparam int N_ADC  = 8;    // two quad ADCs
  localparam int DW     = 18;   // I/Q, amplitude and drive width
  localparam int PW     = 18;   // phase width, full circle = 2**PW
  localparam int LO_NUM = 4;    // f_IF / f_S = LO_NUM / LO_DEN
  localparam int LO_DEN = 11;
  localparam int N_ARC  = 2;    // ARC detector inputs

  // CORDIC operation
  typedef enum logic {
    CORDIC_ROTATE = 1'b0,       // (amplitude, phase) -> (I, Q)
    CORDIC_VECTOR = 1'b1        // (I, Q) -> (amplitude, phase)
  } cordic_op_e;

  // Interlock comparison mode of one quantity of one channel
  typedef enum logic [1:0] {
    CMP_OFF    = 2'd0,          // never trips
    CMP_HIGH   = 2'd1,          // trips when value > hi
    CMP_LOW    = 2'd2,          // trips when value < lo
    CMP_WINDOW = 2'd3           // trips when value is outside [lo, hi]
  } cmp_mode_e;

  // Thresholds and modes of one interlock channel
  typedef struct packed {
    cmp_mode_e          amp_mode;
    cmp_mode_e          phs_mode;
    logic [DW-1:0]      amp_lo;
    logic [DW-1:0]      amp_hi;
    logic signed [PW-1:0] phs_lo;
    logic signed [PW-1:0] phs_hi;
  } inlk_chan_cfg_t;

  // Phase-ramp settings
  typedef struct packed {
    logic               enable;
    logic [7:0]         event_code;   // timing event that starts a ramp
    logic [23:0]        delay;        // cycles from event to first step
    logic signed [PW-1:0] step;       // phase change per step (rate)
    logic [15:0]        steps;        // number of steps
    logic [23:0]        period;       // cycles between steps
    logic [31:0]        timeout;      // limit on the whole ramp, cycles
  } ramp_cfg_t;

  localparam int NSRC = 2 * N_ADC + N_ARC;   // interlock fault sources

  // Station configuration, written through the local bus
  typedef struct packed {
    logic                 amp_close;    // amplitude loop closed
    logic                 phs_close;    // phase loop closed
    logic signed [DW-1:0] amp_sp;       // amplitude setpoint
    logic signed [PW-1:0] phs_sp;       // phase setpoint (loaded when phs_sp_load)
    logic                 phs_sp_load;  // one-cycle pulse on a phase setpoint write
    logic signed [17:0]   amp_kp, amp_ki, phs_kp, phs_ki;
    logic [DW-2:0]        amp_slew, phs_slew;
    logic [11:0]          wave_decim;   // dynamic CIC decimation, frames
    logic [5:0]           wave_shift;   // dynamic CIC output shift
    logic [15:0]          samp_per;     // waveform 'sample' strobe period, cycles
    logic                 wave_trig;    // one-cycle pulse: waveform trigger
    logic                 inlk_reset;   // one-cycle pulse: clear the interlock latch
    logic [NSRC-1:0]      inlk_mask;    // 1 = fault source enabled
    logic                 netan_en;
    logic                 netan_sel;    // 0: amplitude loop, 1: phase loop
    logic [31:0]          netan_freq;
    logic [DW-2:0]        netan_amp;
    ramp_cfg_t            ramp;
  } llrf_cfg_t;

  // Station status, readable through the local bus
  typedef struct packed {
    logic [DW-1:0]        amp_meas;
    logic signed [PW-1:0] phs_meas;
    logic signed [PW-1:0] phase_sp;
    logic                 ramp_busy, ramp_done, ramp_fault;
    logic                 inlk_latch;
    logic [NSRC-1:0]      inlk_status;
    logic [NSRC-1:0]      first_fault;
    logic [DW-1:0]        fault_amp;
    logic signed [PW-1:0] fault_phs;
    logic                 wave_pending;
  } llrf_stat_t;

endpackage
