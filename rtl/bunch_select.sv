// bunch_select - picks one bunch out of the bunch-by-bunch sample stream and
// applies a gain/offset correction to it.
//
// The digitizer delivers one position sample per bunch and per turn over the
// serial link; the link receiver hands them on as a stream, one sample per
// beat, with `in_first` flagging the first bunch of a turn.  A counter numbers
// the bunches inside the turn; when the number equals `cfg_bunch` the sample
// is corrected as
//     y = saturate( ((x - cfg_offset) * cfg_gain) >>> FRAC_W )
// with x and cfg_offset in raw ADC codes and cfg_gain in Q3.12, and y
// (Q3.12) is issued one clock later with `out_valid`.  So exactly one sample
// per turn leaves the block, at the revolution frequency.
//
// Following the described system: selection of the bunch of interest and a
// gain/offset correction.  Design choices: one sample per beat, the turn
// marker, the order "subtract offset, then multiply", floor rounding and
// saturation.
module bunch_select
  import kf_pkg::*;
#(
  parameter int unsigned BUNCH_W = 8   // bunch index width (up to 256 bunches)
) (
  input  logic               clk,
  input  logic               rst_n,
  // sample stream from the link receiver
  input  logic               in_valid,
  input  logic               in_first,   // first bunch of a turn
  input  logic signed [15:0] in_sample,  // raw ADC code
  // configuration
  input  logic [BUNCH_W-1:0] cfg_bunch,
  input  q_t                 cfg_gain,   // Q3.12
  input  q_t                 cfg_offset, // raw ADC code
  // selected, corrected sample (one per turn)
  output logic               out_valid,
  output q_t                 out_sample
);

  logic [BUNCH_W-1:0] cnt;        // index of the next bunch in the turn
  logic [BUNCH_W-1:0] idx;        // index of the current bunch
  logic signed [16:0] diff;
  logic signed [33:0] prod;

  always_comb begin
    idx  = in_first ? '0 : cnt;
    diff = 17'(in_sample) - 17'(cfg_offset);
    prod = 34'(diff) * 34'(cfg_gain);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= idx + 1'b1;
        if (idx == cfg_bunch) begin
          out_valid  <= 1'b1;
          out_sample <= sat_q(64'(prod >>> FRAC_W));
        end
      end
    end
  end

endmodule
