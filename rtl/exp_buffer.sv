// exp_buffer - experience accumulator queue between the inference chain and
// the DMA.
//
// Each step of an episode produces one experience record (action mean, added
// noise, the eight observation samples).  Records are pushed with `in_valid`
// and leave through a valid/ready stream towards the DMA.  The queue is a
// circular array of DEPTH records with read and write pointers; it absorbs the
// latency of the memory path so the real-time chain never waits for memory.
// If a record arrives while the queue is full it is dropped and counted in
// `overflow_cnt` (the real-time loop must not stall); `clear` resets that
// counter.  A record pushed into an empty queue is offered on the output the
// next clock.
//
// Following the described system: FPGA logic that takes the latest data of
// the inference and hands it to the DMA.  The queue depth, the drop-on-full
// policy and the counters are this design's choices.
module exp_buffer
  import kf_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  // records from the output stage
  input  logic        in_valid,
  input  exp_rec_t    in_rec,
  // records to the DMA
  output logic        out_valid,
  input  logic        out_ready,
  output exp_rec_t    out_rec,
  // status
  output logic [$clog2(DEPTH):0] level,
  output logic [31:0] overflow_cnt
);

  localparam int unsigned AW = $clog2(DEPTH);

  exp_rec_t      mem [DEPTH];
  logic [AW:0]   wptr, rptr;   // one extra bit tells full from empty
  logic          full, empty, push, pop;

  assign level   = wptr - rptr;
  assign full    = (level == (AW+1)'(DEPTH));
  assign empty   = (wptr == rptr);
  assign push    = in_valid && !full;
  assign pop     = out_valid && out_ready;
  assign out_valid = !empty;
  assign out_rec   = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_rec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr         <= '0;
      rptr         <= '0;
      overflow_cnt <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      if (clear)                 overflow_cnt <= '0;
      else if (in_valid && full) overflow_cnt <= overflow_cnt + 1'b1;
    end
  end

  // stream rule: a record on offer stays on offer, unchanged, until taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_rec));

endmodule
