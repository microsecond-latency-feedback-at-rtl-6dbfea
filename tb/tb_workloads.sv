// tb_workloads - runs the five training configurations of the feedback
// experiment on the full-size datapath, one 2048-step episode each:
//   L2 reward / 12 hidden neurons, L2 / 8, Tanhsq / 16, L2 / 16, L1 / 16.
// A configuration with fewer than 16 neurons is embedded in the 16-neuron
// network through the neuron mask.  Each episode runs with exploration noise
// (sigma 0.25) against the oscillator beam model; every experience record in
// memory is checked against an integer model of the network
// (mean = model(obs), action = mean + noise), and the latency is checked to be
// the same for every configuration.  The reward of each configuration is then
// computed from the stored records alone, after the episode, as a training
// program would: r_i = f(x_{i+1}) with f = -|x|, -x^2 or -tanh(x^2), x in
// units of 1.0 = 4096 codes.
module tb_workloads;
  import kf_pkg::*;

  localparam int LATENCY = 31;

  logic clk = 0, rst_n = 0;
  logic link_valid = 0, link_first = 0;
  logic signed [15:0] link_sample = '0;
  logic trigger = 0;
  logic reg_wr_en = 0;
  logic [9:0] reg_wr_addr = '0, reg_rd_addr = '0;
  logic [31:0] reg_wr_data = '0, reg_rd_data;
  logic irq_done;
  logic dac_valid;
  q_t dac_code;
  logic mem_valid, mem_ready = 1;
  logic [31:0] mem_addr, mem_data;

  kingfisher_top dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #40_000_000;   // 5 M clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  function automatic longint clamp(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // network parameters as programmed (testbench copy)
  int tw1 [16][8];
  int tb1 [16], tw2 [16];
  int tb2;
  bit trelu = 1;
  int tmask = 16'hffff;

  function automatic int nn_model(input int o [8]);
    longint a, y;
    longint h [16];
    for (int j = 0; j < 16; j++) begin
      a = longint'(tb1[j]) * 4096;
      for (int i = 0; i < 8; i++) a += longint'(tw1[j][i]) * longint'(o[i]);
      h[j] = clamp(a >>> 12);
      if (trelu && h[j] < 0) h[j] = 0;
      if (!tmask[j]) h[j] = 0;
    end
    y = longint'(tb2) * 4096;
    for (int j = 0; j < 16; j++) y += longint'(tw2[j]) * h[j];
    return int'(clamp(y >>> 12));
  endfunction

  task automatic reg_wr(input int a, input int d);
    @(negedge clk);
    reg_wr_en = 1; reg_wr_addr = 10'(a); reg_wr_data = d;
    @(negedge clk);
    reg_wr_en = 0;
  endtask

  task automatic reg_rd(input int a, output int d);
    @(negedge clk);
    reg_rd_addr = 10'(a);
    #1 d = reg_rd_data;
  endtask

  task automatic load_weights(input int range_);
    for (int j = 0; j < 16; j++) begin
      for (int i = 0; i < 8; i++) begin
        tw1[j][i] = int'($urandom_range(2 * range_)) - range_;
        reg_wr(32'h80 + 8 * j + i, tw1[j][i]);
      end
      tb1[j] = int'($urandom_range(800)) - 400;
      reg_wr(32'h10 + j, tb1[j]);
      tw2[j] = int'($urandom_range(2 * range_)) - range_;
      reg_wr(32'h20 + j, tw2[j]);
    end
    tb2 = int'($urandom_range(400)) - 200;
    reg_wr(8, tb2);
  endtask

  // --------------------------------------------------------- link and beam
  int nb = 46;              // beats per turn
  int sel = 5;              // bunch of interest
  real x1 = 0.3, x0 = 0.0;  // beam position (units of 1.0 = 4096 codes)
  int hist [8];             // corrected samples, newest first
  int cyc = 0;
  int sel_cyc = 0;          // clock of the last selected beat
  int last_act = 0;

  initial begin
    for (int k = 0; k < 8; k++) hist[k] = 0;
    wait (rst_n);
    forever begin
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        link_valid = 1;
        link_first = (b == 0);
        if (b == sel) begin
          real xn;
          int code;
          // one revolution of the damped oscillator, kicked by the last action
          xn = 2.0 * 0.995 * $cos(2.0 * 3.14159265 * 0.76) * x1 - 0.990 * x0
               + 0.05 * real'(last_act) / 4096.0;
          x0 = x1;
          x1 = xn;
          code = int'(clamp(longint'($rtoi(x1 * 4096.0)) + longint'($urandom_range(40)) - 20));
          link_sample = 16'(code);
          for (int k = 7; k > 0; k--) hist[k] = hist[k-1];
          hist[0] = code;   // gain 1.0, offset 0 -> corrected sample equals the code
        end else begin
          link_sample = 16'($urandom);
        end
      end
    end
  end

  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ monitors
  int acts [$];              // actions of the current episode
  bit check_live = 1;        // check the latency of every action
  int lat_checked = 0, lat_bad = 0;
  int obs_at_beat [8];
  int beat_cyc = -1;

  // track the selected beat as the DUT sees it
  int bcount = 0;
  always @(posedge clk) begin
    if (link_valid) begin
      int idx;
      idx = link_first ? 0 : bcount;
      bcount <= idx + 1;
      if (idx == sel) begin
        beat_cyc <= cyc;
        for (int k = 0; k < 8; k++) obs_at_beat[k] <= hist[k];
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && dac_valid) begin
      if (irq_done) begin
        checks++;
        if (dac_code != 0) fail("DAC not zeroed at episode end");
      end else begin
        acts.push_back(int'(dac_code));
        last_act = int'(dac_code);
        if (check_live) begin
          checks += 1;
          if (cyc - beat_cyc - 1 != LATENCY) begin
            lat_bad++;
            fail($sformatf("latency %0d, expected %0d", cyc - beat_cyc - 1, LATENCY));
          end
          lat_checked++;
        end
      end
    end
  end

  // memory model
  logic [31:0] mem [int unsigned];
  bit stall = 0;
  always @(negedge clk) mem_ready <= !stall && ($urandom_range(7) != 0);
  always @(posedge clk) begin
    if (mem_valid && mem_ready) mem[mem_addr] = mem_data;
  end

  // check the records of an episode against the actions and the model
  task automatic check_records(input int base, input int n, input bit exact_window);
    int o [8];
    int mean, noise;
    for (int r = 0; r < n; r++) begin
      int unsigned a;
      a = 32'(base + r * 40);
      if (!mem.exists(a) || !mem.exists(a + 36)) begin
        fail($sformatf("record %0d missing", r));
        return;
      end
      mean  = int'(signed'(mem[a]));
      noise = int'(signed'(mem[a + 4]));
      for (int k = 0; k < 8; k++) o[k] = int'(signed'(mem[a + 8 + 4 * k]));
      checks += 2;
      if (mean != nn_model(o))
        fail($sformatf("record %0d mean %0d, model %0d", r, mean, nn_model(o)));
      if (r < acts.size() && acts[r] != int'(clamp(longint'(mean) + longint'(noise))))
        fail($sformatf("record %0d: action %0d != mean %0d + noise %0d", r, acts[r], mean, noise));
    end
  endtask

  task automatic run_episode(input int steps, input int halt_after, output int got_steps);
    int st, guard;
    acts.delete();
    reg_wr(2, steps);
    reg_wr(0, 1);                       // arm
    repeat (50) @(negedge clk);
    trigger = 1;
    repeat (20) @(negedge clk);
    trigger = 0;
    if (halt_after > 0) begin
      while (acts.size() < halt_after) @(negedge clk);
      reg_wr(0, 2);                     // halt
    end
    guard = 0;
    while (!irq_done && guard < 2_000_000) begin
      @(negedge clk);
      guard++;
    end
    repeat (200) @(negedge clk);        // let the DMA finish
    reg_rd(32'h101, got_steps);
    reg_rd(32'h100, st);
    checks += 2;
    if (st != 0) fail("not idle after the episode");
    if (got_steps != acts.size())
      fail($sformatf("%0d steps but %0d actions", got_steps, acts.size()));
    if (halt_after == 0) begin
      checks++;
      if (got_steps != steps) fail($sformatf("episode of %0d steps ran %0d", steps, got_steps));

    end
  endtask

  // ------------------------------------------------------------- sequence
  string cfg_name [5] = '{"L2, 12 N", "L2, 8 N", "Tanhsq, 16 N", "L2, 16 N", "L1, 16 N"};
  int    cfg_n    [5] = '{12, 8, 16, 16, 16};
  int    cfg_rew  [5] = '{2, 2, 3, 2, 1};

  initial begin
    int n, recs;
    repeat (5) @(posedge clk);
    rst_n = 1;
    reg_wr(3, sel);
    reg_wr(6, 1024);                     // sigma = 0.25
    for (int c = 0; c < 5; c++) begin
      real reward;
      int base;
      base = 32'h0010_0000 * (c + 1);
      load_weights(1200);
      tmask = (1 << cfg_n[c]) - 1;
      reg_wr(7, tmask);
      reg_wr(9, base);
      lat_checked = 0;
      run_episode(N_STEPS, 0, n);
      reg_rd(32'h104, recs);
      checks++;
      if (recs != N_STEPS) fail($sformatf("%s: %0d records", cfg_name[c], recs));
      checks++;
      if (lat_checked != N_STEPS) fail($sformatf("%s: %0d latency checks", cfg_name[c], lat_checked));
      check_records(base, N_STEPS, 0);
      // training-time reward from the stored observations
      reward = 0.0;
      for (int r = 0; r + 1 < N_STEPS; r++) begin
        real x;
        x = real'(int'(signed'(mem[32'(base + (r + 1) * 40 + 8)]))) / 4096.0;
        case (cfg_rew[c])
          1: reward += -((x < 0) ? -x : x);
          2: reward += -(x * x);
          default: reward += -((1.0 - $exp(-2.0 * x * x)) / (1.0 + $exp(-2.0 * x * x)));
        endcase
      end
      checks++;
      if (reward > 0.0) fail("positive reward");
      $display("%s: %0d steps, %0d records, cumulative reward %f", cfg_name[c], n, recs, reward);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
