// episode_ctrl: sequencing of one welding episode.
//
// An episode is one weld line of N_STEPS control steps of one acquisition
// window (10 ms) each. Once the host has armed it, the controller watches the
// 100 kS/s OR samples; the first sample at or above or_threshold (the laser
// has started to melt the surface) starts the episode and restarts the
// acquisition window there. Then, for each window t = 0 .. N_STEPS-1:
//   obs_valid -> infer_start (the policy runs on window t while window t+1 is
//   acquired) -> act_valid from the action head -> the action code is applied
//   to the DAC (`apply`, dac_code updated) and (s_t, a_t) is pushed to the
//   trajectory FIFO, `step` advances.
// The action computed from window t drives the laser during window t+1, so
// the last action is held for one more window (state S_TAIL); at the end of
// that window episode_done pulses (an interrupt for the processor), the DAC
// returns to code 0 and the controller waits to be armed again.
//
// Published: the OR threshold trigger, the fixed number of steps per
// episode, applying each action as soon as it is computed, and storing
// (s_t, a_t) for the processor. This design's own: the arm handshake, the
// window restart at the trigger, the tail window, and holding code 0 (the
// lowest power) before the first action and between episodes.
//
// Timing: infer_start is registered one cycle after obs_valid; apply,
// step and dac_code change in the cycle after act_valid. A window must be
// longer than the inference; an assertion checks that no window ends while an
// inference is in flight.
module episode_ctrl
  import rl_pkg::*;
#(
  parameter int unsigned N_STEPS = N_STEPS_DEF,
  localparam int unsigned SW = $clog2(N_STEPS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             arm,
  input  logic             sample_stb,
  input  obs_t             sample_or,
  input  obs_t             or_threshold,
  input  logic             obs_valid,
  input  logic             act_valid,
  input  logic [DAC_W-1:0] act_code,
  output logic             win_restart,
  output logic             infer_start,
  output logic             apply,
  output logic [SW-1:0]    step,
  output logic             last_step,
  output logic             active,
  output logic             waiting,
  output logic             episode_done,
  output logic [DAC_W-1:0] dac_code
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT_TRIG, S_RUN, S_TAIL} state_e;
  state_e state;
  logic   inflight;

  assign active    = (state == S_RUN) || (state == S_TAIL);
  assign waiting   = (state == S_WAIT_TRIG);
  assign last_step = (step == SW'(N_STEPS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      inflight     <= 1'b0;
      step         <= '0;
      win_restart  <= 1'b0;
      infer_start  <= 1'b0;
      apply        <= 1'b0;
      episode_done <= 1'b0;
      dac_code     <= '0;
    end else begin
      win_restart  <= 1'b0;
      infer_start  <= 1'b0;
      apply        <= 1'b0;
      episode_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (arm) state <= S_WAIT_TRIG;
        end
        S_WAIT_TRIG: begin
          if (sample_stb && sample_or >= or_threshold) begin
            state       <= S_RUN;
            step        <= '0;
            inflight    <= 1'b0;
            win_restart <= 1'b1;
          end
        end
        S_RUN: begin
          if (obs_valid && !inflight) begin
            infer_start <= 1'b1;
            inflight    <= 1'b1;
          end
          if (act_valid && inflight) begin
            inflight <= 1'b0;
            apply    <= 1'b1;
            dac_code <= act_code;
            if (last_step) state <= S_TAIL;
          end
        end
        S_TAIL: begin
          if (obs_valid) begin
            state        <= S_IDLE;
            episode_done <= 1'b1;
            dac_code     <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
      // Step counts applied actions; it moves with `apply`.
      if (apply) step <= last_step ? '0 : step + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (active && obs_valid) |-> !inflight)
    else $error("episode_ctrl: window ended before the previous action was applied");
endmodule
