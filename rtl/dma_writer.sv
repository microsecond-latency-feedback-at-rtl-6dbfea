// dma_writer - writes experience records into system memory without processor
// involvement.
//
// A record is taken from the queue and sent as REC_WORDS = 10 consecutive
// 32-bit writes on a simple address/data/valid/ready bus:
//   word 0 = action mean, word 1 = added noise, words 2..9 = x(t) .. x(t-7),
// each value sign-extended from Q3.12 to 32 bits.  Record n of an episode
// lands at byte address  cfg_base + (n * REC_WORDS + w) * 4.  `start` (the
// beginning of an episode) resets n to 0 as soon as the record in progress,
// if any, has been written; at most `cfg_max_rec` records are
// written per episode, further ones are consumed and counted in
// `dropped_cnt` so the buffer region is never overrun.  `rec_cnt` is the
// number of records written in the current episode, readable by the
// processor that copies the data out.
//
// Bus rule: once `mem_valid` is high, address and data stay unchanged until
// `mem_ready` accepts the word.  One word per clock when memory is ready.
//
// Following the described system: a DMA block that stores the
// observation-action stream in DDR memory.  The bus (a simplified stand-in
// for the AXI port of the memory controller), the 32-bit word layout and the
// record order are this design's choices.
module dma_writer
  import kf_pkg::*;
#(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,        // episode start: restart at cfg_base
  input  logic [ADDR_W-1:0] cfg_base,
  input  logic [CNT_W-1:0]  cfg_max_rec,
  // records from the experience queue
  input  logic              rec_valid,
  output logic              rec_ready,
  input  exp_rec_t          rec,
  // memory write bus
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [ADDR_W-1:0] mem_addr,
  output logic [31:0]       mem_data,
  // status
  output logic [CNT_W-1:0]  rec_cnt,
  output logic [31:0]       dropped_cnt
);

  localparam int unsigned WW = $clog2(REC_WORDS);

  logic [WW-1:0]      word;
  logic [ADDR_W-1:0]  ptr;      // address of the next word
  logic [REC_WORDS-1:0][DATA_W-1:0] cur;   // record being written, word order
  logic               active;
  logic               restart;  // episode start seen, not yet applied

  function automatic logic [31:0] sext(input logic [DATA_W-1:0] v);
    return {{(32-DATA_W){v[DATA_W-1]}}, v};
  endfunction

  // take a record when idle; drop it when the episode's region is full
  assign rec_ready = !active && !start && !restart;
  assign mem_valid = active;
  assign mem_addr  = ptr;
  assign mem_data  = sext(cur[word]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      restart     <= 1'b0;
      word        <= '0;
      ptr         <= '0;
      cur         <= '0;
      rec_cnt     <= '0;
      dropped_cnt <= '0;
    end else begin
      if (start) restart <= 1'b1;
      if (!active && (start || restart)) begin
        // a restart waits for the record in progress to finish
        ptr     <= cfg_base;
        rec_cnt <= '0;
        restart <= 1'b0;
      end else if (!active && rec_valid) begin
        if (rec_cnt < cfg_max_rec) begin
          cur[0] <= rec.mean;
          cur[1] <= rec.noise;
          for (int k = 0; k < N_OBS; k++) cur[2 + k] <= rec.obs[k];
          word   <= '0;
          active <= 1'b1;
        end else begin
          dropped_cnt <= dropped_cnt + 1'b1;
        end
      end
      if (active && mem_ready) begin
        ptr <= ptr + ADDR_W'(4);
        if (word == WW'(REC_WORDS - 1)) begin
          active  <= 1'b0;
          rec_cnt <= rec_cnt + 1'b1;
        end else begin
          word <= word + 1'b1;
        end
      end
    end
  end

  a_bus_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_valid && !mem_ready |=>
                               mem_valid && $stable(mem_addr) && $stable(mem_data));

endmodule
