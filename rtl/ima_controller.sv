// ima_controller: sequencer of one top-k in-memory ADC conversion.
//
// Order of one conversion, following the paper:
//   PRE   1 cycle   bit-line pre-charge; top-k counter and registers cleared
//   MAC   PWM window of the word-line driver (pwm_start in the PRE cycle)
//   CAL   1 cycle   all 32 calibration pulses at once (set the ramp start)
//   RAMP  1 cycle   next ramp pulse, cycle number cyc (0..31)
//   ARB   arbitration: every ARB_PERIOD cycles one pending request is
//                    granted (arb_en); the next ramp pulse follows once
//                    RAMP_PERIOD cycles have passed since the last one and
//                    no request is left.
// The conversion stops as soon as the counter reports count >= k (early
// stop, the ramp is abandoned) or after the 32nd ramp step.
//
// Design choices beyond the paper: one clock for everything (the paper's
// 2 GHz PWM clock; RAMP_PERIOD = 8 gives its 4 ns ramp clock and
// ARB_PERIOD = 5 a 2.5 ns slot above its 2.08 ns arbiter delay), and the
// ramp waiting for all requests of a step to be granted ("stall"), so the
// cycle stored with each address is exact. A step therefore lasts
// max(RAMP_PERIOD, n*ARB_PERIOD + 2) cycles for n grants (RAMP_PERIOD >= 2).
// When start is high in cycle 0, the first ramp pulse is in cycle 127
// (1 PRE + 124 MAC + 1 CAL) and done is high in cycle 127 + the sum of the
// step lengths; a step cut short by the counter lasts m*ARB_PERIOD + 2
// cycles for its m grants.
//
// Outputs: done pulses one cycle at the end; early_stop and the number of
// stalled steps are held until the next start.
module ima_controller
  import topkima_pkg::*;
#(
  parameter int RAMP_PERIOD = 8,
  parameter int ARB_PERIOD  = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N_CAL-1:0]    cal_mask,
  input  logic                pwm_done,
  input  logic                stop,
  input  logic                req_any,
  output logic                busy,
  output logic                precharge,
  output logic                clr,
  output logic                pwm_start,
  output logic [N_CAL-1:0]    cal_pulse,
  output logic [N_RAMP-1:0]   ramp_pulse,
  output logic                arb_en,
  output logic [ADC_BITS-1:0] cyc,
  output logic                done,
  output logic                early_stop,
  output logic [ADC_BITS:0]   stall_steps
);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_MAC, S_CAL, S_RAMP, S_ARB} state_t;

  localparam int TW = $clog2(RAMP_PERIOD + N_RAMP * ARB_PERIOD + 4);
  localparam int AW = (ARB_PERIOD > 1) ? $clog2(ARB_PERIOD) : 1;

  state_t        state;
  logic [TW-1:0] step_t;   // cycles since the last ramp pulse
  logic [AW-1:0] arb_t;    // position in the arbitration slot
  logic          stalled;  // this step outlasted RAMP_PERIOD

  wire slot_end   = (arb_t == AW'(ARB_PERIOD - 1));
  wire step_ready = !req_any && (step_t >= TW'(RAMP_PERIOD - 2));

  assign busy       = (state != S_IDLE);
  assign precharge  = (state == S_PRE);
  assign clr        = (state == S_PRE);
  assign pwm_start  = (state == S_PRE);
  assign cal_pulse  = (state == S_CAL) ? cal_mask : '0;
  assign ramp_pulse = (state == S_RAMP) ? (N_RAMP'(1) << cyc) : '0;
  assign arb_en     = (state == S_ARB) && !stop && req_any && slot_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      step_t      <= '0;
      arb_t       <= '0;
      cyc         <= '0;
      done        <= 1'b0;
      early_stop  <= 1'b0;
      stall_steps <= '0;
      stalled     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state       <= S_PRE;
          early_stop  <= 1'b0;
          stall_steps <= '0;
        end
        S_PRE:  state <= S_MAC;
        S_MAC:  if (pwm_done) state <= S_CAL;
        S_CAL: begin
          state <= S_RAMP;
          cyc   <= '0;
        end
        S_RAMP: begin
          state   <= S_ARB;
          step_t  <= '0;
          arb_t   <= '0;
          stalled <= 1'b0;
        end
        S_ARB: begin
          step_t <= step_t + 1'b1;
          arb_t  <= slot_end ? '0 : arb_t + 1'b1;
          if (step_t >= TW'(RAMP_PERIOD - 2) && req_any) stalled <= 1'b1;
          if (stop) begin
            state      <= S_IDLE;
            done       <= 1'b1;
            early_stop <= 1'b1;
            if (stalled) stall_steps <= stall_steps + 1'b1;
          end else if (step_ready) begin
            if (stalled) stall_steps <= stall_steps + 1'b1;
            if (cyc == ADC_BITS'(N_RAMP - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_RAMP;
              cyc   <= cyc + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
