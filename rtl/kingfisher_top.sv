// kingfisher_top - real-time reinforcement-learning feedback datapath with an
// experience accumulator.
//
// Data flow, one step per accelerator turn:
//   link stream -> bunch_select (bunch of interest, gain/offset)
//     -> aie_ctrl (trigger, step budget, graceful stop)
//     -> circ_buffer (latest eight samples)
//     -> actor_nn (8 -> 16 ReLU -> 1, action mean)
//     -> output_kernel (+ Gaussian noise from 16 pcg_rng uniforms)
//     -> action to the DAC
//   and, for every step, the record {mean, noise, x(t)..x(t-7)}
//     -> exp_buffer -> dma_writer -> memory write bus (DDR controller).
// A processor writes weights and settings and reads status through
// param_regs; `irq_done` pulses when an episode has ended and its last
// inference has completed, in the same clock in which the DAC code returns to
// zero (one clock after the last action).
//
// Timing at the default sizes: from the selected link beat to the action at
// the DAC port takes TOP_LATENCY = 31 clocks (bunch_select 1, aie_ctrl 1,
// circ_buffer 1, actor_nn 26, output_kernel 1, DAC register 1), i.e. 248 ns at
// a 125 MHz clock; a new step can start every 27 clocks, well inside one
// accelerator turn (about 46 clocks at 2.7 MHz revolution frequency).
//
// Outside an episode the DAC code is held at zero.  The link receiver, the DAC,
// the memory controller and the processor are outside this module; their
// connections are the ports below.
module kingfisher_top
  import kf_pkg::*;
#(
  parameter int unsigned N_IN      = N_OBS,
  parameter int unsigned N_HID     = N_HIDDEN,
  parameter int unsigned FIFO_RECS = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // sample stream from the link receiver
  input  logic               link_valid,
  input  logic               link_first,
  input  logic signed [15:0] link_sample,
  // episode start input
  input  logic               trigger,
  // processor register bus
  input  logic               reg_wr_en,
  input  logic [9:0]         reg_wr_addr,
  input  logic [31:0]        reg_wr_data,
  input  logic [9:0]         reg_rd_addr,
  output logic [31:0]        reg_rd_data,
  output logic               irq_done,
  // action to the DAC
  output logic               dac_valid,
  output q_t                 dac_code,
  // memory write bus (experience records)
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic [31:0]        mem_addr,
  output logic [31:0]        mem_data
);

  // configuration
  logic                     arm, halt, seed_load, relu_en;
  logic [15:0]              n_steps;
  logic [7:0]               bunch;
  q_t                       gain, offset, sigma, b2;
  logic [N_HID-1:0]         hid_mask;
  logic [31:0]              dma_base;
  logic [63:0]              seed, seq;
  q_t [N_HID-1:0][N_IN-1:0] w1;
  q_t [N_HID-1:0]           b1, w2;

  // datapath
  logic                     sel_valid;
  q_t                       sel_sample;
  logic                     fwd_valid, fwd_launch, launch_d;
  q_t                       fwd_data;
  logic                     obs_valid;
  q_t [N_IN-1:0]            obs, nn_obs;
  logic                     nn_busy, nn_done;
  q_t                       nn_mean;
  logic                     rnd_valid;
  logic [31:0]              rnd_u32, rnd_f32;
  logic                     act_valid, gauss_valid, rec_valid;
  q_t                       action, noise;
  exp_rec_t                 rec, q_rec;
  logic                     q_valid, q_ready;
  logic [$clog2(FIFO_RECS):0] q_level;

  // status
  ctrl_state_e              state;
  logic [15:0]              step_cnt, rec_cnt;
  logic [31:0]              overrun_cnt, overflow_cnt, dropped_cnt;
  logic                     episode_start, done;

  param_regs #(.N_IN(N_IN), .N_HID(N_HID)) u_regs (
    .clk, .rst_n,
    .wr_en(reg_wr_en), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .rd_addr(reg_rd_addr), .rd_data(reg_rd_data),
    .arm, .halt, .seed_load, .relu_en, .n_steps, .bunch, .gain, .offset,
    .sigma, .hid_mask, .dma_base, .seed, .seq, .w1, .b1, .w2, .b2,
    .st_state(state), .st_steps(step_cnt), .st_overrun(overrun_cnt),
    .st_overflow(overflow_cnt), .st_records(rec_cnt), .st_dropped(dropped_cnt)
  );

  bunch_select #(.BUNCH_W(8)) u_sel (
    .clk, .rst_n,
    .in_valid(link_valid), .in_first(link_first), .in_sample(link_sample),
    .cfg_bunch(bunch), .cfg_gain(gain), .cfg_offset(offset),
    .out_valid(sel_valid), .out_sample(sel_sample)
  );

  aie_ctrl #(.STEP_W(16)) u_ctrl (
    .clk, .rst_n,
    .arm, .halt, .trigger, .cfg_n_steps(n_steps),
    .smp_valid(sel_valid), .smp_data(sel_sample),
    .act_valid,
    .fwd_valid, .fwd_data, .fwd_launch,
    .state, .step_cnt, .overrun_cnt, .episode_start, .done
  );

  circ_buffer #(.DEPTH(N_IN)) u_buf (
    .clk, .rst_n,
    .in_valid(fwd_valid), .in_sample(fwd_data),
    .out_valid(obs_valid), .obs
  );

  // the launch flag travels alongside the sample through the buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) launch_d <= 1'b0;
    else        launch_d <= fwd_valid && fwd_launch;
  end

  actor_nn #(.N_IN(N_IN), .N_HID(N_HID)) u_nn (
    .clk, .rst_n,
    .w1, .b1, .w2, .b2, .relu_en, .hid_mask,
    .start(obs_valid && launch_d), .obs,
    .busy(nn_busy), .done(nn_done), .mean(nn_mean), .obs_out(nn_obs)
  );

  pcg_rng u_rng (
    .clk, .rst_n,
    .en(1'b1), .seed_load, .seed, .seq,
    .out_valid(rnd_valid), .out_u32(rnd_u32), .out_f32(rnd_f32)
  );

  output_kernel #(.NR(N_RAND), .NO(N_IN)) u_out (
    .clk, .rst_n,
    .rnd_valid, .rnd_f32, .cfg_sigma(sigma),
    .nn_done, .mean(nn_mean), .obs(nn_obs),
    .act_valid, .action, .noise, .gauss_valid,
    .rec_valid, .rec
  );

  exp_buffer #(.DEPTH(FIFO_RECS)) u_queue (
    .clk, .rst_n, .clear(episode_start),
    .in_valid(rec_valid), .in_rec(rec),
    .out_valid(q_valid), .out_ready(q_ready), .out_rec(q_rec),
    .level(q_level), .overflow_cnt
  );

  dma_writer #(.ADDR_W(32), .CNT_W(16)) u_dma (
    .clk, .rst_n,
    .start(episode_start), .cfg_base(dma_base), .cfg_max_rec(n_steps),
    .rec_valid(q_valid), .rec_ready(q_ready), .rec(q_rec),
    .mem_valid, .mem_ready, .mem_addr, .mem_data,
    .rec_cnt, .dropped_cnt
  );

  // DAC register: the latest action during an episode, zero otherwise
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_valid <= 1'b0;
      dac_code  <= '0;
    end else begin
      dac_valid <= act_valid || done;
      if (act_valid)  dac_code <= action;
      else if (done)  dac_code <= '0;
    end
  end

  // the interrupt comes with the DAC's return to zero, after the last action
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) irq_done <= 1'b0;
    else        irq_done <= done;
  end

endmodule
