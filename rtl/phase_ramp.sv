// phase_ramp: timing-event driven ramp of the phase-loop setpoint.
//
// Used to align the RF buckets of the accumulator ring and the storage ring
// before a beam swap: both stations receive the same timing event and rotate
// their phase setpoints in step.  Sequence (states):
//   IDLE   setpoint writes (sp_load) copy sp_base into the setpoint.  A timing
//          event whose code equals cfg.event_code, with cfg.enable set,
//          starts a ramp.
//   DELAY  wait cfg.delay cycles (compensates the event's arrival time).
//   STEP   add cfg.step to the setpoint (the ramp rate).
//   WAIT   wait cfg.period cycles while checking 'locked'; after cfg.steps
//          steps the ramp is finished (done), otherwise back to STEP.
//   A loss of lock in WAIT, or a ramp lasting longer than cfg.timeout
//   cycles, ends the ramp with 'fault' set and the setpoint where it was.
// busy is high from the event to the end; setpoint writes are ignored while
// busy.  done and fault hold until the next ramp starts.  The phase word
// wraps modulo a full turn, so a ramp may cover many RF periods.
//
// Timing: the first step is applied cfg.delay+2 cycles after the event
// cycle, later steps every cfg.period+2 cycles.  The sequence follows the
// paper's bucket-alignment diagram; the state encoding, the meaning given to
// "rate, steps, total ramp time" and the lock input are this design's.
module phase_ramp
  import llrf_pkg::ramp_cfg_t;
#(
  parameter int PW = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [7:0]           evr_code,
  input  logic                 evr_valid,
  input  ramp_cfg_t            cfg,
  input  logic                 sp_load,
  input  logic signed [PW-1:0] sp_base,
  input  logic                 locked,
  output logic signed [PW-1:0] phase_sp,
  output logic                 busy,
  output logic                 done,
  output logic                 fault
);

  typedef enum logic [2:0] {S_IDLE, S_DELAY, S_STEP, S_WAIT} state_e;
  state_e      state;
  logic [23:0] cnt;
  logic [15:0] nstep;
  logic [31:0] total;
  logic        start;

  assign start = evr_valid && cfg.enable && (evr_code == cfg.event_code);
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; cnt <= '0; nstep <= '0; total <= '0;
      phase_sp <= '0; done <= 1'b0; fault <= 1'b0;
    end else begin
      if (state != S_IDLE) total <= total + 1'b1;
      case (state)
        S_IDLE: begin
          if (sp_load) phase_sp <= sp_base;
          if (start) begin
            state <= S_DELAY; cnt <= cfg.delay; nstep <= '0; total <= '0;
            done  <= 1'b0;    fault <= 1'b0;
          end
        end
        S_DELAY: begin
          if (cnt == 0) state <= S_STEP;
          else          cnt <= cnt - 1'b1;
        end
        S_STEP: begin
          phase_sp <= phase_sp + cfg.step;
          nstep    <= nstep + 1'b1;
          cnt      <= cfg.period;
          state    <= S_WAIT;
        end
        S_WAIT: begin
          if (!locked) begin
            fault <= 1'b1; state <= S_IDLE;
          end else if (cnt == 0) begin
            if (nstep >= cfg.steps) begin
              done <= 1'b1; state <= S_IDLE;
            end else state <= S_STEP;
          end else cnt <= cnt - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
      if (state != S_IDLE && total >= cfg.timeout) begin
        fault <= 1'b1; state <= S_IDLE;
      end
    end
  end

endmodule
