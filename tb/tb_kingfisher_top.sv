// tb_kingfisher_top - end-to-end test of the feedback datapath at its default
// sizes (8 inputs, 16 hidden neurons, 2048-step episodes).
//
// The testbench plays the parts around the datapath: a link source that sends
// turns of bunch samples, a beam model (a damped harmonic oscillator with a
// betatron tune of 0.76 that is kicked by every action), a processor that
// programs the registers, and a memory that stores the DMA writes.
//
// Episodes:
//   1. full episode, 2048 steps, no noise, ReLU on: every action is checked
//      against an integer model of the network fed with the testbench's own
//      sample history, the latency from link beat to DAC is checked
//      (31 clocks), and all 2048 records in memory are checked.
//   2. new weights, ReLU off (linear filter mode), 12 of 16 neurons enabled,
//      noise with sigma 0.5, another bunch: records and actions checked
//      (action = mean + noise, mean = model(obs)), noise statistics checked.
//   3. halt after about 100 steps: the episode must end gracefully, with as
//      many records in memory as steps done.
//   4. short turns (12 beats): samples come faster than the network, overruns
//      must be counted, every action still checked.
//   5. memory stalled for a while: the record queue overflows, records
//      written + records dropped must equal the steps.
// Before episode 2 the noise generator is reseeded through the registers;
// every noise value recorded in that episode must then be the Gaussian sum
// of 16 consecutive values of a software PCG32 seeded the same way.
// Each mechanism is counted and a failure is counted for one that never
// happened.
module tb_kingfisher_top;
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
    #20_000_000;   // 2.5 M clocks
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

  // software PCG32 (pcg32_srandom seeding, XSH-RR output)
  longint unsigned rs, rinc;
  int m_seed = 0;                       // reseeds checked (mechanism count)
  function automatic int unsigned pcg_next();
    longint unsigned old;
    int unsigned xs, r;
    old = rs;
    rs  = old * 64'd6364136223846793005 + rinc;
    xs  = int'((((old >> 18) ^ old) >> 27) & 64'hffffffff);
    r   = int'(old >> 59);
    return (xs >> r) | (xs << ((32 - r) & 31));
  endfunction

  // Reseed the generator through the registers and keep the stream a PCG32
  // seeded the same way produces from then on.
  int unsigned rstream [];
  task automatic reseed(input longint unsigned sd, input longint unsigned sq, input int len);
    reg_wr(32'h00A, int'(sd[31:0]));  reg_wr(32'h00B, int'(sd[63:32]));
    reg_wr(32'h00C, int'(sq[31:0]));  reg_wr(32'h00D, int'(sq[63:32]));
    rinc = (sq << 1) | 1; rs = 0;
    void'(pcg_next()); rs += sd; void'(pcg_next());
    rstream = new[len];
    foreach (rstream[k]) rstream[k] = pcg_next();
    reg_wr(32'h000, 32'h4);             // CTRL bit2: load seed
  endtask

  // Noise the noise stage makes from 16 uniforms starting at stream index i:
  // sum of u32[31:8] (Q0.24), minus 8, times sqrt(12/16), times sigma.
  function automatic int gauss_noise(input int i, input int sigma);
    longint sum, g;
    sum = 0;
    for (int k = 0; k < 16; k++) sum += longint'(rstream[i + k] >> 8);
    g = ((sum - (longint'(16) << 23)) * 56756) >>> 16;
    return int'(clamp((longint'(sigma) * g) >>> 24));
  endfunction

  // Every record's noise must be the noise of a group of 16 consecutive
  // values of the reseeded stream, in order, at one group phase, with at
  // most 4 groups (64 clocks) between consecutive steps of a 46-clock turn.
  task automatic check_reseed_noise(input int base, input int n, input int sigma);
    int best, last, gap, ng;
    best = 0;
    ng = (rstream.size() - 32) / 16;
    for (int p = 0; p < 16 && best < n; p++) begin
      int k, r;
      k = -1; r = 0;
      // the first record may come any time after the reseed
      for (int j = 0; j < ng && k < 0; j++)
        if (gauss_noise(p + 16 * j, sigma) == int'(signed'(mem[32'(base + 4)]))) k = j;
      if (k < 0) continue;
      for (r = 1; r < n; r++) begin
        last = k; k = -1;
        for (gap = 1; gap <= 4 && k < 0; gap++)
          if (last + gap < ng &&
              gauss_noise(p + 16 * (last + gap), sigma) == int'(signed'(mem[32'(base + r * 40 + 4)])))
            k = last + gap;
        if (k < 0) break;
      end
      if (r > best) best = r;
    end
    checks++;
    if (best != n) fail($sformatf("only %0d of %0d noise values follow the reseeded stream", best, n));
    else m_seed++;
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
  bit check_live = 0;        // compare each action with the model at once
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
          checks += 2;
          if (cyc - beat_cyc - 1 != LATENCY) begin
            lat_bad++;
            fail($sformatf("latency %0d, expected %0d", cyc - beat_cyc - 1, LATENCY));
          end
          lat_checked++;
          if (int'(dac_code) != nn_model(obs_at_beat))
            fail($sformatf("action %0d, model %0d", dac_code, nn_model(obs_at_beat)));
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

  // -------------------------------------------------------- mechanisms
  int m_trigger = 0, m_step_limit = 0, m_halt = 0, m_overrun = 0, m_overflow = 0;
  int m_linear = 0, m_mask = 0, m_reload = 0, m_noise = 0, m_bunch = 0;

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
    m_trigger++;
    if (halt_after > 0) begin
      while (acts.size() < halt_after) @(negedge clk);
      reg_wr(0, 2);                     // halt
      m_halt++;
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
      else m_step_limit++;
    end
  endtask

  // ------------------------------------------------------------- sequence
  initial begin
    int n, recs, ovf, ovr;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // episode 1: full size, no noise, live checks
    reg_wr(3, sel);
    load_weights(1500);
    reg_wr(9, 32'h0001_0000);
    check_live = 1;
    run_episode(N_STEPS, 0, n);
    check_live = 0;
    reg_rd(32'h104, recs);
    checks++;
    if (recs != N_STEPS) fail($sformatf("%0d records written, expected %0d", recs, N_STEPS));
    check_records(32'h0001_0000, N_STEPS, 1);
    // at one sample per 46-clock turn (2.7 MHz at 125 MHz) no step may be lost
    reg_rd(32'h102, ovr);
    checks++;
    if (ovr != 0) fail($sformatf("%0d overruns at the nominal turn rate", ovr));
    $display("episode 1: %0d steps, %0d latency checks", n, lat_checked);

    // episode 2: reload, linear mode, masked neurons, noise, other bunch
    reseed(64'h0123_4567_89ab_cdef, 64'd7, 46 * 400 * 2);
    load_weights(1200);
    m_reload++;
    trelu = 0; reg_wr(1, 0); m_linear++;
    tmask = 16'h0fff; reg_wr(7, tmask); m_mask++;
    sel = 17; reg_wr(3, sel); m_bunch++;
    reg_wr(6, 2048);                    // sigma = 0.5
    reg_wr(9, 32'h0010_0000);
    run_episode(400, 0, n);
    check_records(32'h0010_0000, n, 0);
    check_reseed_noise(32'h0010_0000, n, 2048);
    begin
      real s = 0, s2 = 0, mu, sd;
      for (int r = 0; r < n; r++) begin
        real v;
        v = real'(int'(signed'(mem[32'h0010_0000 + r * 40 + 4])));
        s += v; s2 += v * v;
      end
      mu = s / n; sd = $sqrt(s2 / n - mu * mu);
      $display("episode 2: noise mean %f std %f (expected about 0 and 2048)", mu, sd);
      checks++;
      if (sd < 1700 || sd > 2400 || mu > 400 || mu < -400) fail("noise statistics");
      else m_noise++;
    end

    // episode 3: halt
    reg_wr(9, 32'h0020_0000);
    run_episode(N_STEPS, 100, n);
    reg_rd(32'h104, recs);
    checks += 2;
    if (n >= N_STEPS || n < 100) fail($sformatf("halt: %0d steps", n));
    if (recs != n) fail($sformatf("halt: %0d records for %0d steps", recs, n));
    check_records(32'h0020_0000, n, 0);

    // episode 4: short turns -> overruns
    nb = 12; sel = 3; reg_wr(3, sel);
    reg_wr(9, 32'h0030_0000);
    run_episode(150, 0, n);
    reg_rd(32'h102, ovr);
    checks++;
    if (ovr == 0) fail("no overrun with 12-beat turns");
    else m_overrun++;
    check_records(32'h0030_0000, n, 0);
    $display("episode 4: %0d overruns", ovr);

    // episode 5: memory stalled -> queue overflow
    nb = 46;
    reg_wr(9, 32'h0040_0000);
    fork
      begin
        int ignore;
        run_episode(200, 0, ignore);
      end
      begin
        repeat (100) @(negedge clk);
        stall = 1;
        repeat (46 * 80) @(negedge clk);
        stall = 0;
      end
    join
    reg_rd(32'h104, recs);
    reg_rd(32'h103, ovf);
    checks += 2;
    if (ovf == 0) fail("no queue overflow with memory stalled");
    else m_overflow++;
    if (recs + ovf != 200) fail($sformatf("records %0d + overflow %0d != 200", recs, ovf));
    $display("episode 5: %0d records written, %0d dropped", recs, ovf);

    $display("mechanisms: trigger %0d, step limit %0d, halt %0d, overrun %0d, overflow %0d, linear %0d, mask %0d, reload %0d, noise %0d, bunch change %0d, reseed %0d",
             m_trigger, m_step_limit, m_halt, m_overrun, m_overflow, m_linear, m_mask, m_reload, m_noise, m_bunch, m_seed);
    checks += 10;
    if (m_trigger == 0)    fail("trigger start never happened");
    if (m_step_limit == 0) fail("step limit never reached");
    if (m_halt == 0)       fail("halt never happened");
    if (m_overrun == 0)    fail("overrun never happened");
    if (m_overflow == 0)   fail("overflow never happened");
    if (m_linear == 0)     fail("linear mode never used");
    if (m_mask == 0)       fail("neuron mask never used");
    if (m_reload == 0)     fail("weight reload never happened");
    if (m_noise == 0)      fail("noise never checked");
    if (m_bunch == 0)      fail("bunch change never happened");
    if (m_seed == 0)       fail("generator reseed never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
