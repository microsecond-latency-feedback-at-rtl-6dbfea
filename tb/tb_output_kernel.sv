// tb_output_kernel - self-checking test of the Gaussian noise and action stage.
// Feeds random single-precision uniforms (multiples of 2^-24, built by hand
// from random 24-bit integers), with random gaps, and models in integers:
//   g     = ((sum of 16 values in Q0.24) - 8.0) * 56756 >>> 16
//   noise = clamp((sigma * g) >>> 24)
// The noise output is checked after every group of 16.  Network results are
// injected at random times and the action (clamp(mean + noise)) and the
// experience record are checked one clock later.  A statistics pass with
// sigma = 1.0 checks that the noise has mean about 0 and standard deviation
// about 1.0 (4096 in Q3.12).
module tb_output_kernel;
  import kf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rnd_valid = 0;
  logic [31:0] rnd_f32 = '0;
  q_t cfg_sigma = '0;
  logic nn_done = 0;
  q_t mean = '0;
  q_t [7:0] obs = '0;
  logic act_valid, gauss_valid, rec_valid;
  q_t action, noise;
  exp_rec_t rec;

  int checks = 0, failures = 0;

  output_kernel dut (.*);

  always #4 clk = ~clk;

  initial begin
    #40_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build the float for u / 2^24 without using the design's conversion
  function automatic logic [31:0] to_f32(input int unsigned u);
    int e;
    int unsigned m;
    if (u == 0) return 32'h0;
    e = 126;
    m = u;
    while (m < 32'h800000) begin
      m = m << 1;
      e--;
    end
    return {1'b0, 8'(e), 23'(m & 32'h7fffff)};
  endfunction

  function automatic q_t clamp(input longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return q_t'(v);
  endfunction

  longint sum = 0;
  int cnt = 0;
  q_t exp_noise = '0;
  longint g;
  real acc = 0, acc2 = 0;
  int nstat = 0;
  bit stats = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      stats = (phase == 1);
      for (int c = 0; c < (stats ? 200000 : 6000); c++) begin
        int unsigned u;
        @(negedge clk);
        if (!stats && c % 500 == 0) cfg_sigma = q_t'($urandom_range(12000));
        if (stats) cfg_sigma = 16'sd4096;
        // random stream with gaps
        rnd_valid = stats || ($urandom_range(3) != 0);
        u = $urandom_range(24'hffffff);
        if (!stats && c % 97 == 0) u = 0;
        rnd_f32 = to_f32(u);
        // a network result now and then
        nn_done = !stats && ($urandom_range(20) == 0);
        mean    = q_t'($urandom);
        if (c % 3 == 0) mean = q_t'($urandom_range(4000));
        for (int k = 0; k < 8; k++) obs[k] = q_t'($urandom);
        begin
          q_t m_hold, n_hold;
          q_t [7:0] o_hold;
          bit d_hold;
          m_hold = mean; n_hold = exp_noise; o_hold = obs; d_hold = nn_done;
          if (rnd_valid) begin
            sum += u;
            cnt++;
          end
          @(negedge clk);
          nn_done = 0;
          rnd_valid = 0;
          if (d_hold) begin
            checks += 4;
            if (!act_valid || action !== clamp(longint'(m_hold) + longint'(n_hold))) begin
              failures++;
              $display("action %0d expected %0d", action, clamp(longint'(m_hold) + longint'(n_hold)));
            end
            if (!rec_valid || rec.mean !== m_hold) begin failures++; $display("record mean"); end
            if (rec.noise !== n_hold) begin failures++; $display("record noise %0d exp %0d", rec.noise, n_hold); end
            if (rec.obs !== o_hold) begin failures++; $display("record obs"); end
          end else begin
            checks++;
            if (act_valid || rec_valid) begin failures++; $display("spurious action"); end
          end
          if (cnt == 16) begin
            g = ((sum - (longint'(8) << 24)) * 56756) >>> 16;
            exp_noise = clamp((longint'(cfg_sigma) * g) >>> 24);
            sum = 0;
            cnt = 0;
            @(negedge clk);   // noise register follows one clock later
            checks++;
            if (noise !== exp_noise) begin
              failures++;
              $display("noise %0d expected %0d", noise, exp_noise);
            end
            if (stats) begin
              acc  += real'(noise);
              acc2 += real'(noise) * real'(noise);
              nstat++;
            end
          end
        end
      end
    end
    begin
      real mu, sd;
      mu = acc / nstat;
      sd = $sqrt(acc2 / nstat - mu * mu);
      $display("noise statistics over %0d samples: mean %f std %f (Q3.12 units)", nstat, mu, sd);
      checks += 2;
      if (mu > 120.0 || mu < -120.0) begin failures++; $display("noise mean off"); end
      if (sd < 3800.0 || sd > 4400.0) begin failures++; $display("noise std off"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
