// tb_aie_ctrl - self-checking test of the episode controller.
// A sample arrives every PERIOD clocks; a model of the inference chain returns
// act_valid LAT clocks after each launched sample.  Checks: every sample is
// forwarded unchanged one clock later; nothing is launched before arm and
// trigger; an episode launches exactly cfg_n_steps inferences; `done` pulses
// once, only after the last inference returned (graceful stop); the state
// sequence idle -> armed -> run -> drain -> idle; a halt during an episode
// stops it early but still waits for the inference in flight; samples that
// arrive while an inference is in flight are counted as overruns and not
// launched; a trigger without arm starts nothing.
module tb_aie_ctrl;
  import kf_pkg::*;

  localparam int LAT = 28;

  logic clk = 0, rst_n = 0;
  logic arm = 0, halt = 0, trigger = 0;
  logic [15:0] cfg_n_steps = 16'd10;
  logic smp_valid = 0;
  q_t smp_data = '0;
  logic act_valid = 0;
  logic fwd_valid, fwd_launch;
  q_t fwd_data;
  ctrl_state_e state;
  logic [15:0] step_cnt;
  logic [31:0] overrun_cnt;
  logic episode_start, done;

  int checks = 0, failures = 0;

  aie_ctrl dut (.*);

  always #4 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int period = 46;
  int launches = 0, dones = 0, starts = 0, inflight_model = 0;
  int last_act_time = -1, done_time = -1;
  q_t sent;
  bit sent_v = 0;
  int pending [$];   // return times of launched inferences
  int cyc = 0;

  // sample source and inference-chain model
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // forwarding check
      if (sent_v) begin
        checks++;
        if (!fwd_valid || fwd_data !== sent) begin
          failures++;
          $display("forwarding broken at %0d", cyc);
        end
      end
      if (fwd_valid && fwd_launch) begin
        launches++;
        pending.push_back(cyc + LAT);
        checks++;
        if (state != ST_RUN && state != ST_DRAIN) begin
          failures++;
          $display("launch outside an episode");
        end
      end
      if (episode_start) starts++;
      if (done) begin
        dones++;
        done_time = cyc;
        checks++;
        if (pending.size() != 0) begin
          failures++;
          $display("done while an inference is in flight");
        end
      end
    end
  end

  always @(negedge clk) begin
    act_valid <= 0;
    if (pending.size() != 0 && pending[0] <= cyc) begin
      void'(pending.pop_front());
      act_valid <= 1;
    end
    smp_valid <= (cyc % period == 0);
    smp_data  <= q_t'($urandom);
  end
  always @(posedge clk) begin
    sent_v <= smp_valid;
    sent   <= smp_data;
  end

  task automatic pulse(ref logic s);
    @(negedge clk);
    s = 1;
    @(negedge clk);
    s = 0;
  endtask

  task automatic wait_idle();
    int guard = 0;
    while (state != ST_IDLE && guard < 100000) begin
      @(negedge clk);
      guard++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);
    // trigger without arm: nothing happens
    trigger = 1; repeat (10) @(negedge clk); trigger = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (launches != 0 || state != ST_IDLE) begin failures++; $display("started without arm"); end

    // full episode
    pulse(arm);
    @(negedge clk);
    checks++;
    if (state != ST_ARMED) begin failures++; $display("not armed"); end
    repeat (100) @(negedge clk);
    checks++;
    if (launches != 0) begin failures++; $display("launched before trigger"); end
    trigger = 1;
    repeat (8) @(negedge clk);
    trigger = 0;
    checks++;
    if (state != ST_RUN) begin failures++; $display("not running after trigger"); end
    wait_idle();
    repeat (5) @(negedge clk);
    checks += 4;
    if (launches != 10) begin failures++; $display("episode launched %0d, expected 10", launches); end
    if (dones != 1) begin failures++; $display("done pulsed %0d times", dones); end
    if (starts != 1) begin failures++; $display("episode_start pulsed %0d times", starts); end
    if (step_cnt != 10) begin failures++; $display("step_cnt %0d", step_cnt); end

    // halt: stop after a few steps, gracefully
    cfg_n_steps = 16'd2048;
    pulse(arm);
    trigger = 1; repeat (4) @(negedge clk); trigger = 0;
    repeat (3 * period + 10) @(negedge clk);
    while (!(fwd_valid && fwd_launch)) @(negedge clk);   // an inference just started
    halt = 1;
    @(negedge clk);
    halt = 0;
    checks++;
    if (state != ST_DRAIN) begin failures++; $display("halt did not drain, state %0d", state); end
    wait_idle();
    repeat (2) @(negedge clk);
    checks += 2;
    if (dones != 2) begin failures++; $display("no done after halt"); end
    if (launches > 16) begin failures++; $display("halt ignored: %0d launches", launches); end

    // overruns: samples faster than the inference latency
    period = 10;
    cfg_n_steps = 16'd20;
    launches = 0;
    pulse(arm);
    trigger = 1; repeat (4) @(negedge clk); trigger = 0;
    wait_idle();
    repeat (5) @(negedge clk);
    checks += 2;
    if (launches != 20) begin failures++; $display("overrun episode launched %0d", launches); end
    if (overrun_cnt < 20) begin failures++; $display("overrun count %0d too low", overrun_cnt); end
    $display("overruns counted: %0d", overrun_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
