// kf_pkg - shared types and constants of the real-time reinforcement-learning
// feedback datapath.
//
// Every value that flows between the blocks (beam-position samples, network
// weights and biases, hidden activations, the action mean, the exploration
// noise and the action sent to the DAC) is a 16-bit two's-complement
// fixed-point number with 12 fractional bits (Q3.12: range [-8, 8), step
// 1/4096).  The original system evaluates the network in floating point on
// an AI-engine array; the fixed-point format is this design's choice.
//
// The sizes that come from the described system are the observation length
// (eight samples), the hidden-layer width (sixteen neurons), the number of
// uniform random numbers summed per Gaussian sample (sixteen) and the episode
// length (2048 steps).  Everything else here is a design choice.
package kf_pkg;

  // Fixed-point format
  parameter int unsigned DATA_W = 16;   // width of every datapath value
  parameter int unsigned FRAC_W = 12;   // fractional bits (Q3.12)

  // Sizes taken from the described system
  parameter int unsigned N_OBS     = 8;     // observation: latest eight samples
  parameter int unsigned N_HIDDEN  = 16;    // hidden neurons of the actor
  parameter int unsigned N_RAND    = 16;    // uniforms summed per Gaussian sample
  parameter int unsigned N_STEPS   = 2048;  // interaction steps per episode

  // Experience record: action mean, added noise, then the eight inputs
  parameter int unsigned REC_WORDS = N_OBS + 2;

  typedef logic signed [DATA_W-1:0] q_t;

  // Episode controller states
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,   // samples refresh the history, no inference
    ST_ARMED = 2'd1,   // waiting for the trigger
    ST_RUN   = 2'd2,   // one inference per selected sample
    ST_DRAIN = 2'd3    // step budget used or halt: let the last inference finish
  } ctrl_state_e;

  // One experience record as handed from the output stage to the DMA
  typedef struct packed {
    q_t                  mean;    // network output before the noise
    q_t                  noise;   // noise actually added to the mean
    q_t [N_OBS-1:0]      obs;     // obs[0] = x(t), obs[k] = x(t-k)
  } exp_rec_t;

  // Saturate a wide signed value to the datapath width.
  function automatic q_t sat_q(input logic signed [63:0] v);
    if (v > 64'sd32767)       return q_t'(16'sh7fff);
    else if (v < -64'sd32768) return q_t'(16'sh8000);
    else                      return q_t'(v[DATA_W-1:0]);
  endfunction

endpackage
