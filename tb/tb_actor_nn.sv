// tb_actor_nn - self-checking test of the actor network.
// Loads random weights and biases, applies random observations and compares
// the action mean with an integer reference model of the same arithmetic
// (bias << 12 plus products, arithmetic shift by 12, clamp to 16 bits, ReLU,
// neuron mask).  Covers ReLU on and off, masked neurons and saturation, checks
// that the forwarded inputs match, and that every result arrives exactly
// 26 clocks after start (constant latency for any weights or mask).
module tb_actor_nn;
  import kf_pkg::*;

  localparam int NI = 8, NH = 16, LAT = NI + NH + 2;

  logic clk = 0, rst_n = 0;
  q_t [NH-1:0][NI-1:0] w1;
  q_t [NH-1:0] b1, w2;
  q_t b2;
  logic relu_en;
  logic [NH-1:0] hid_mask;
  logic start = 0;
  q_t [NI-1:0] obs, obs_out;
  logic busy, done;
  q_t mean;

  int checks = 0, failures = 0;

  actor_nn dut (.*);

  always #4 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clamp(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic q_t reference();
    longint a, o;
    longint h [NH];
    for (int j = 0; j < NH; j++) begin
      a = longint'(b1[j]) * 4096;
      for (int i = 0; i < NI; i++) a += longint'(w1[j][i]) * longint'(obs[i]);
      h[j] = clamp(a >>> 12);
      if (relu_en && h[j] < 0) h[j] = 0;
      if (!hid_mask[j]) h[j] = 0;
    end
    o = longint'(b2) * 4096;
    for (int j = 0; j < NH; j++) o += longint'(w2[j]) * h[j];
    return q_t'(clamp(o >>> 12));
  endfunction

  function automatic q_t rnd_q(input int range_);
    return q_t'(int'($urandom_range(2 * range_)) - range_);
  endfunction

  initial begin
    q_t exp_mean;
    q_t [NI-1:0] obs_sent;
    int cycles;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      // weight ranges: mostly moderate, some large enough to saturate
      for (int j = 0; j < NH; j++) begin
        for (int i = 0; i < NI; i++) w1[j][i] = rnd_q((t % 10 == 9) ? 32767 : 3000);
        b1[j] = rnd_q(4000);
        w2[j] = rnd_q((t % 10 == 8) ? 32767 : 3000);
      end
      b2 = rnd_q(4000);
      for (int i = 0; i < NI; i++) obs[i] = rnd_q((t % 7 == 6) ? 32767 : 8000);
      relu_en  = (t % 3 != 0);
      hid_mask = (t % 4 == 0) ? 16'($urandom) : 16'hffff;
      exp_mean = reference();
      obs_sent = obs;
      start = 1;
      @(negedge clk);
      start = 0;
      obs = '0;    // inputs must have been latched at start
      cycles = 0;   // clocks after the edge that took start
      while (!done && cycles < 100) begin
        @(negedge clk);
        cycles++;
      end
      checks += 3;
      if (cycles != LAT) begin
        failures++;
        $display("latency %0d, expected %0d", cycles, LAT);
      end
      if (mean !== exp_mean) begin
        failures++;
        $display("test %0d: mean %0d expected %0d", t, mean, exp_mean);
      end
      if (obs_out !== obs_sent) begin
        failures++;
        $display("forwarded inputs differ");
      end
      @(negedge clk);
      checks++;
      if (busy) begin
        failures++;
        $display("still busy after done");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
