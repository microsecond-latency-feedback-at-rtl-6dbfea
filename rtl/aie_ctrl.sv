// aie_ctrl - episode control between the sample stream and the inference chain.
//
// Every selected sample is forwarded (registered, one clock) to the circular
// buffer so the observation history is always current.  Whether a sample also
// launches an inference depends on the episode state:
//
//   ST_IDLE  --arm-->  ST_ARMED  --trigger rising edge-->  ST_RUN
//   ST_RUN   --cfg_n_steps inferences launched, or halt-->  ST_DRAIN
//   ST_DRAIN --no inference in flight any more-->  ST_IDLE, `done` pulses
//   ST_ARMED --halt-->  ST_IDLE
//
// In ST_RUN each forwarded sample carries `fwd_launch` = 1 unless the previous
// inference is still in flight; such a sample is not launched and is counted
// in `overrun_cnt`, which is cleared at the start of each episode.  The chain
// never holds two inferences, so an action is never mixed with another step's
// data.  ST_DRAIN is the graceful stop: no new
// launches, but the inference already started completes, so its action and
// its experience record are not lost.  The trigger input is asynchronous and
// passes a two-flop synchronizer first.  `episode_start` pulses on the
// ST_ARMED -> ST_RUN transition.
//
// Following the described system: a trigger starts the agent at a precise
// time, a counter limits the interaction to a number of steps, and the logic
// forwards data and stops the engine gracefully.  The state machine, the
// overrun rule and the synchronizer are this design's choices.
module aie_ctrl
  import kf_pkg::*;
#(
  parameter int unsigned STEP_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              arm,          // pulse: wait for the next trigger
  input  logic              halt,        // pulse: stop the episode gracefully
  input  logic              trigger,      // asynchronous start input
  input  logic [STEP_W-1:0] cfg_n_steps,  // steps per episode
  // selected samples
  input  logic              smp_valid,
  input  q_t                smp_data,
  // return path of the inference chain
  input  logic              act_valid,    // an inference completed
  // towards the circular buffer / network
  output logic              fwd_valid,
  output q_t                fwd_data,
  output logic              fwd_launch,   // this sample starts an inference
  // status
  output ctrl_state_e       state,
  output logic [STEP_W-1:0] step_cnt,
  output logic [31:0]       overrun_cnt,
  output logic              episode_start,
  output logic              done
);

  logic [1:0] trig_sync;
  logic       trig_q;
  logic       trig_rise;
  logic       inflight;
  logic       launch;

  assign trig_rise = trig_sync[1] & ~trig_q;
  assign launch    = smp_valid && (state == ST_RUN) && !inflight &&
                     (step_cnt < cfg_n_steps) && !halt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_sync     <= '0;
      trig_q        <= 1'b0;
      state         <= ST_IDLE;
      step_cnt      <= '0;
      overrun_cnt   <= '0;
      inflight      <= 1'b0;
      fwd_valid     <= 1'b0;
      fwd_data      <= '0;
      fwd_launch    <= 1'b0;
      episode_start <= 1'b0;
      done          <= 1'b0;
    end else begin
      trig_sync     <= {trig_sync[0], trigger};
      trig_q        <= trig_sync[1];
      fwd_valid     <= smp_valid;
      fwd_launch    <= launch;
      if (smp_valid) fwd_data <= smp_data;
      episode_start <= 1'b0;
      done          <= 1'b0;

      if (launch)         inflight <= 1'b1;
      else if (act_valid) inflight <= 1'b0;

      if (smp_valid && state == ST_RUN && inflight)
        overrun_cnt <= overrun_cnt + 1'b1;

      unique case (state)
        ST_IDLE: begin
          if (arm) state <= ST_ARMED;
        end
        ST_ARMED: begin
          if (halt) state <= ST_IDLE;
          else if (trig_rise) begin
            state         <= ST_RUN;
            step_cnt      <= '0;
            overrun_cnt   <= '0;
            episode_start <= 1'b1;
          end
        end
        ST_RUN: begin
          if (launch) step_cnt <= step_cnt + 1'b1;
          if (halt || (launch && step_cnt + 1'b1 >= cfg_n_steps) ||
              step_cnt >= cfg_n_steps)
            state <= ST_DRAIN;
        end
        ST_DRAIN: begin
          if (!inflight) begin
            state <= ST_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // an inference result may only come back while one is in flight
  a_no_spurious_act: assert property (@(posedge clk) disable iff (!rst_n)
                                      act_valid |-> inflight);

endmodule
