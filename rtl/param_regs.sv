// param_regs - run-time parameter and status registers, written and read by
// the processor that runs the control server and loads new network weights
// after every training step.
//
// Bus: word-addressed, one write per clock (`wr_en`, `wr_addr`, `wr_data`),
// combinational read (`rd_addr` -> `rd_data`).  Datapath values occupy the low
// 16 bits of a word (Q3.12 unless noted).  Register map (word addresses):
//   0x000 CTRL      W: bit0 arm, bit1 halt, bit2 rng seed load (pulses, read 0)
//   0x001 CONFIG    bit0 relu_en (reset 1)
//   0x002 N_STEPS   steps per episode (reset 2048)
//   0x003 BUNCH     bunch of interest (reset 0)
//   0x004 GAIN      gain, Q3.12 (reset 1.0)
//   0x005 OFFSET    offset, raw ADC code (reset 0)
//   0x006 SIGMA     exploration noise standard deviation, Q3.12 (reset 0)
//   0x007 HID_MASK  hidden-neuron enable mask (reset all ones)
//   0x008 B2        output bias
//   0x009 DMA_BASE  byte address of the experience region
//   0x00A SEED_LO, 0x00B SEED_HI, 0x00C SEQ_LO, 0x00D SEQ_HI   generator seed
//   0x010+h         B1[h]           hidden biases
//   0x020+h         W2[h]           output weights
//   0x080+8*h+i     W1[h][i]        hidden weights (i = input index, N_IN <= 8)
//   0x100 STATUS    R: episode state (0 idle, 1 armed, 2 run, 3 drain)
//   0x101 STEPS     R: steps done in this episode
//   0x102 OVERRUN   R: samples not launched because an inference was in flight
//                     (this episode)
//   0x103 OVERFLOW  R: records dropped because the queue was full (this episode)
//   0x104 RECORDS   R: records written to memory in this episode
//   0x105 DROPPED   R: records beyond the episode region
// Unmapped addresses read 0.  Weights may be rewritten at any time; writing
// them between episodes keeps an episode on one policy.
//
// Following the described system: parameters exposed through the control
// system, network weights and biases reloaded at run time, the ReLU switch,
// the run-time noise level and the step counter.  The map itself, widths and
// reset values are this design's choices.
module param_regs
  import kf_pkg::*;
#(
  parameter int unsigned N_IN  = N_OBS,
  parameter int unsigned N_HID = N_HIDDEN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // processor bus
  input  logic                     wr_en,
  input  logic [9:0]               wr_addr,
  input  logic [31:0]              wr_data,
  input  logic [9:0]               rd_addr,
  output logic [31:0]              rd_data,
  // control pulses
  output logic                     arm,
  output logic                     halt,
  output logic                     seed_load,
  // configuration
  output logic                     relu_en,
  output logic [15:0]              n_steps,
  output logic [7:0]               bunch,
  output q_t                       gain,
  output q_t                       offset,
  output q_t                       sigma,
  output logic [N_HID-1:0]         hid_mask,
  output logic [31:0]              dma_base,
  output logic [63:0]              seed,
  output logic [63:0]              seq,
  // network parameters
  output q_t [N_HID-1:0][N_IN-1:0] w1,
  output q_t [N_HID-1:0]           b1,
  output q_t [N_HID-1:0]           w2,
  output q_t                       b2,
  // status
  input  ctrl_state_e              st_state,
  input  logic [15:0]              st_steps,
  input  logic [31:0]              st_overrun,
  input  logic [31:0]              st_overflow,
  input  logic [15:0]              st_records,
  input  logic [31:0]              st_dropped
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arm       <= 1'b0;
      halt     <= 1'b0;
      seed_load <= 1'b0;
      relu_en   <= 1'b1;
      n_steps   <= 16'(N_STEPS);
      bunch     <= '0;
      gain      <= q_t'(1 << FRAC_W);
      offset    <= '0;
      sigma     <= '0;
      hid_mask  <= '1;
      dma_base  <= '0;
      seed      <= 64'd42;
      seq       <= 64'd54;
      w1        <= '0;
      b1        <= '0;
      w2        <= '0;
      b2        <= '0;
    end else begin
      arm       <= 1'b0;
      halt     <= 1'b0;
      seed_load <= 1'b0;
      if (wr_en) begin
        if (wr_addr >= 10'h080 && wr_addr < 10'(10'h080 + N_HID * 8) &&
            {1'b0, wr_addr[2:0]} < 4'(N_IN))
          w1[(wr_addr - 10'h080) >> 3][wr_addr[2:0]] <= wr_data[15:0];
        else if (wr_addr >= 10'h010 && wr_addr < 10'(10'h010 + N_HID))
          b1[wr_addr - 10'h010] <= wr_data[15:0];
        else if (wr_addr >= 10'h020 && wr_addr < 10'(10'h020 + N_HID))
          w2[wr_addr - 10'h020] <= wr_data[15:0];
        else begin
          unique case (wr_addr)
            10'h000: begin
              arm       <= wr_data[0];
              halt     <= wr_data[1];
              seed_load <= wr_data[2];
            end
            10'h001: relu_en       <= wr_data[0];
            10'h002: n_steps       <= wr_data[15:0];
            10'h003: bunch         <= wr_data[7:0];
            10'h004: gain          <= wr_data[15:0];
            10'h005: offset        <= wr_data[15:0];
            10'h006: sigma         <= wr_data[15:0];
            10'h007: hid_mask      <= wr_data[N_HID-1:0];
            10'h008: b2            <= wr_data[15:0];
            10'h009: dma_base      <= wr_data;
            10'h00A: seed[31:0]    <= wr_data;
            10'h00B: seed[63:32]   <= wr_data;
            10'h00C: seq[31:0]     <= wr_data;
            10'h00D: seq[63:32]    <= wr_data;
            default: ;
          endcase
        end
      end
    end
  end

  function automatic logic [31:0] sx(input q_t v);
    return 32'(signed'(v));
  endfunction

  always_comb begin
    rd_data = '0;
    if (rd_addr >= 10'h080 && rd_addr < 10'(10'h080 + N_HID * 8)) begin
      if ({1'b0, rd_addr[2:0]} < 4'(N_IN)) rd_data = sx(w1[(rd_addr - 10'h080) >> 3][rd_addr[2:0]]);
    end else if (rd_addr >= 10'h010 && rd_addr < 10'(10'h010 + N_HID))
      rd_data = sx(b1[rd_addr - 10'h010]);
    else if (rd_addr >= 10'h020 && rd_addr < 10'(10'h020 + N_HID))
      rd_data = sx(w2[rd_addr - 10'h020]);
    else begin
      unique case (rd_addr)
        10'h001: rd_data = {31'b0, relu_en};
        10'h002: rd_data = {16'b0, n_steps};
        10'h003: rd_data = {24'b0, bunch};
        10'h004: rd_data = sx(gain);
        10'h005: rd_data = sx(offset);
        10'h006: rd_data = sx(sigma);
        10'h007: rd_data = 32'(hid_mask);
        10'h008: rd_data = sx(b2);
        10'h009: rd_data = dma_base;
        10'h00A: rd_data = seed[31:0];
        10'h00B: rd_data = seed[63:32];
        10'h00C: rd_data = seq[31:0];
        10'h00D: rd_data = seq[63:32];
        10'h100: rd_data = {30'b0, st_state};
        10'h101: rd_data = {16'b0, st_steps};
        10'h102: rd_data = st_overrun;
        10'h103: rd_data = st_overflow;
        10'h104: rd_data = {16'b0, st_records};
        10'h105: rd_data = st_dropped;
        default: rd_data = '0;
      endcase
    end
  end

endmodule
