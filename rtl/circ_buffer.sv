// circ_buffer - circular buffer holding the latest N_OBS position samples.
//
// Each accepted sample is written at the write pointer, which then advances by
// one (wrapping).  The observation vector is read around the pointer, newest
// first: obs[0] = x(t), obs[1] = x(t-1), ..., obs[N_OBS-1] = x(t-N_OBS+1).
// `out_valid` pulses one clock after a write, when obs already includes the
// new sample; obs stays readable until the next write.  Reset clears the
// history to zero.
//
// Following the described system: a circular buffer with a data pointer that
// streams the latest eight samples to the network.  The reset value and the
// one-cycle timing are this design's choice.
module circ_buffer
  import kf_pkg::*;
#(
  parameter int unsigned DEPTH = N_OBS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  q_t                 in_sample,
  output logic               out_valid,
  output q_t [DEPTH-1:0]     obs
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  q_t            mem [DEPTH];
  logic [PW-1:0] wptr;   // next location to write

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        mem[wptr] <= in_sample;
        wptr      <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      end
    end
  end

  // newest sample sits just behind the write pointer
  always_comb begin
    for (int k = 0; k < DEPTH; k++) begin
      int unsigned pos;
      pos    = (int'(wptr) + 2 * DEPTH - 1 - k) % DEPTH;
      obs[k] = mem[pos];
    end
  end

endmodule
