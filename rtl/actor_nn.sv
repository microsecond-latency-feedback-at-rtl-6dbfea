// actor_nn - the policy network: N_IN inputs, one hidden layer of N_HID
// neurons with a switchable ReLU, one linear output (the action mean).
//
// Operation.  A `start` pulse latches the observation vector.  The hidden layer
// is computed by N_HID multiply-accumulate units working in parallel, one input
// per clock:  acc[h] = b1[h] + sum_i w1[h][i] * obs[i]   (N_IN clocks).
// Each sum is scaled back to Q3.12 (arithmetic shift, saturation), passed
// through the ReLU when `relu_en` is set (with relu_en = 0 the network is
// linear, e.g. an FIR filter over the eight samples), and forced to zero when
// its bit in `hid_mask` is clear (one clock).  The output layer then runs on a
// single multiply-accumulate unit, one hidden neuron per clock:
// mean = b2 + sum_h w2[h] * hid[h]   (N_HID clocks), scaled back the same way.
// `done` pulses with `mean` valid and with `obs_out`, the inputs the result
// belongs to, forwarded for the experience record.
//
// Timing: `done` comes LATENCY = N_IN + N_HID + 2 clocks after `start`
// (26 clocks at 8 inputs and 16 neurons), whatever the weights or mask: a
// smaller network embedded in this one by masking neurons or zeroing weights
// keeps the same latency.  `start` while `busy` is ignored.
//
// Following the described system: eight inputs, sixteen hidden neurons, ReLU
// that can be switched off at run time, a final linear layer, inputs forwarded
// with the result, and smaller networks embedded by switching weights off at
// constant computation count.  The fixed-point arithmetic, the MAC schedule and
// the per-neuron mask register are this design's choices (the original runs in
// floating point on AI-engine tiles).
module actor_nn
  import kf_pkg::*;
#(
  parameter int unsigned N_IN  = N_OBS,
  parameter int unsigned N_HID = N_HIDDEN
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // parameters (loaded at run time through the register file)
  input  q_t [N_HID-1:0][N_IN-1:0]    w1,
  input  q_t [N_HID-1:0]              b1,
  input  q_t [N_HID-1:0]              w2,
  input  q_t                          b2,
  input  logic                        relu_en,
  input  logic [N_HID-1:0]            hid_mask,
  // inference request
  input  logic                        start,
  input  q_t [N_IN-1:0]               obs,
  // result
  output logic                        busy,
  output logic                        done,
  output q_t                          mean,
  output q_t [N_IN-1:0]               obs_out
);

  localparam int unsigned LATENCY = N_IN + N_HID + 2;
  localparam int unsigned ACC_W   = 2 * DATA_W + $clog2(N_IN + N_HID + 1) + 2;
  localparam int unsigned CW      = $clog2(N_IN + N_HID + 1);

  typedef enum logic [1:0] {S_IDLE, S_L1, S_ACT, S_L2} nn_state_e;

  nn_state_e                     st;
  logic [CW-1:0]                 cnt;
  logic signed [ACC_W-1:0]       acc1 [N_HID];
  logic signed [ACC_W-1:0]       acc2;
  q_t [N_HID-1:0]                hid;

  // bias scaled to the product format (2*FRAC_W fractional bits)
  function automatic logic signed [ACC_W-1:0] bias_acc(input q_t b);
    return ACC_W'(b) <<< FRAC_W;
  endfunction

  // scale an accumulator back to Q3.12
  function automatic q_t rescale(input logic signed [ACC_W-1:0] a);
    return sat_q(64'(a >>> FRAC_W));
  endfunction

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cnt     <= '0;
      acc2    <= '0;
      hid     <= '0;
      done    <= 1'b0;
      mean    <= '0;
      obs_out <= '0;
      for (int h = 0; h < N_HID; h++) acc1[h] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (start) begin
            obs_out <= obs;
            for (int h = 0; h < N_HID; h++) acc1[h] <= bias_acc(b1[h]);
            cnt <= '0;
            st  <= S_L1;
          end
        end
        S_L1: begin
          for (int h = 0; h < N_HID; h++)
            acc1[h] <= acc1[h] + ACC_W'(w1[h][cnt] * obs_out[cnt]);
          if (cnt == CW'(N_IN - 1)) st <= S_ACT;
          else                      cnt <= cnt + 1'b1;
        end
        S_ACT: begin
          for (int h = 0; h < N_HID; h++) begin
            q_t v;
            v = rescale(acc1[h]);
            if (relu_en && v < 0) v = '0;
            hid[h] <= hid_mask[h] ? v : '0;
          end
          acc2 <= bias_acc(b2);
          cnt  <= '0;
          st   <= S_L2;
        end
        S_L2: begin
          if (cnt == CW'(N_HID)) begin
            mean <= rescale(acc2);
            done <= 1'b1;
            st   <= S_IDLE;
          end else begin
            acc2 <= acc2 + ACC_W'(w2[cnt] * hid[cnt]);
            cnt  <= cnt + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
