// output_kernel - exploration noise and action output of the agent, plus the
// assembly of the experience record.
//
// Gaussian sample.  The random stream delivers single-precision uniforms in
// [0, 1) that are multiples of 2^-24.  Each is converted exactly to an
// unsigned Q0.24 integer and N_RAND = 16 consecutive values are summed.  The
// sum has mean 8 and variance 16/12; subtracting 8 and multiplying by
// sqrt(12/16) = 0.8660 (Q0.16 constant 56756) gives an approximately standard
// normal sample g (central limit theorem), held in Q4.24.  A new g is ready
// every 16 accepted random numbers; the scaled noise
//     noise = saturate( (cfg_sigma * g) >>> 24 )          (Q3.12)
// follows one clock later and is held until the next one.
//
// Action.  When the network reports a result (`nn_done`), the current noise is
// added to the action mean:  action = saturate(mean + noise).  One clock later
// `act_valid` pulses with the action for the DAC and `rec_valid` with the
// experience record {mean, noise, obs[0..7]}.  The noise is refreshed every
// 16 clocks while the network needs 26 clocks per inference, so consecutive
// steps never share a noise sample.
//
// Following the described system: sum of sixteen uniform random numbers as an
// approximately Gaussian sample, noise with a run-time standard deviation added
// to the network output, and a record with the eight inputs, the random value
// and the output before the noise.  The fixed-point formats, the sqrt(12/16)
// normalization (so that cfg_sigma is the standard deviation) and recording the
// scaled noise as "the random value" are this design's choices.
module output_kernel
  import kf_pkg::*;
#(
  parameter int unsigned NR = N_RAND,
  parameter int unsigned NO = N_OBS
) (
  input  logic          clk,
  input  logic          rst_n,
  // uniform random stream (IEEE-754 single, [0,1))
  input  logic          rnd_valid,
  input  logic [31:0]   rnd_f32,
  // run-time standard deviation of the exploration noise (Q3.12)
  input  q_t            cfg_sigma,
  // network result
  input  logic          nn_done,
  input  q_t            mean,
  input  q_t [NO-1:0]   obs,
  // action to the DAC
  output logic          act_valid,
  output q_t            action,
  // current exploration noise (Q3.12) and Gaussian-sample strobe
  output q_t            noise,
  output logic          gauss_valid,
  // experience record
  output logic          rec_valid,
  output exp_rec_t      rec
);

  localparam int unsigned SUM_W = 24 + $clog2(NR) + 1;
  localparam int unsigned CW    = $clog2(NR);
  localparam logic [15:0] NORM  = 16'd56756;   // sqrt(12/16) in Q0.16

  logic [CW-1:0]             cnt;
  logic [SUM_W-1:0]          sum;
  logic [23:0]               u24;        // current uniform in Q0.24
  logic [SUM_W-1:0]          sum_next;
  logic signed [SUM_W:0]     g;          // normalized Gaussian sample, Q4.24
  logic signed [SUM_W+17:0]  g_scaled;
  logic signed [63:0]        prod;

  // exact conversion of a float in [0,1) that is a multiple of 2^-24
  function automatic logic [23:0] f32_to_q024(input logic [31:0] f);
    logic [7:0] e;
    e = f[30:23];
    if (e == 8'd0 || e > 8'd126) return '0;
    return 24'({1'b1, f[22:0]} >> (8'd126 - e));
  endfunction

  always_comb begin
    u24      = f32_to_q024(rnd_f32);
    sum_next = sum + SUM_W'(u24);
    g_scaled = (SUM_W+18)'($signed({1'b0, sum_next}) - $signed((SUM_W+1)'(NR) <<< 23))
               * $signed({1'b0, NORM});
    prod     = 64'(cfg_sigma) * 64'(g);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt         <= '0;
      sum         <= '0;
      g           <= '0;
      gauss_valid <= 1'b0;
      noise       <= '0;
      act_valid   <= 1'b0;
      action      <= '0;
      rec_valid   <= 1'b0;
      rec         <= '0;
    end else begin
      gauss_valid <= 1'b0;
      act_valid   <= 1'b0;
      rec_valid   <= 1'b0;

      // accumulate NR uniforms into one Gaussian sample
      if (rnd_valid) begin
        if (cnt == CW'(NR - 1)) begin
          cnt         <= '0;
          sum         <= '0;
          g           <= (SUM_W+1)'(g_scaled >>> 16);
          gauss_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
          sum <= sum_next;
        end
      end

      // scale by the run-time standard deviation
      if (gauss_valid) noise <= sat_q(prod >>> 24);

      // action = mean + noise, and the record for the DMA
      if (nn_done) begin
        action    <= sat_q(64'(mean) + 64'(noise));
        act_valid <= 1'b1;
        rec_valid <= 1'b1;
        rec.mean  <= mean;
        rec.noise <= noise;
        rec.obs   <= obs;
      end
    end
  end

endmodule
