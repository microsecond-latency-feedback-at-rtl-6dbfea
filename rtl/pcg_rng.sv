// pcg_rng - permuted congruential generator (PCG32, XSH-RR output function)
// producing one uniform random number per clock, as a 32-bit integer and as
// an IEEE-754 single-precision value in [0, 1).
//
// State update (64-bit LCG):  s' = s * 6364136223846793005 + inc, with
// inc = (seq << 1) | 1.  Output of the old state s:
//   xorshifted = ((s >> 18) ^ s) >> 27   (low 32 bits)
//   rot        = s >> 59
//   u32        = rotate_right(xorshifted, rot)
// Seeding follows the reference pcg32_srandom(seed, seq):
//   s = ((inc + seed) * mult) + inc.
// The float is u32[31:8] * 2^-24: the 24 most significant bits are
// normalized (leading-zero count) into an exact single-precision number, so
// every value is a multiple of 2^-24 in [0, 1 - 2^-24] (the sign bit,
// out_f32[31], is therefore always 0).
//
// Timing: with `en` high a new number appears every clock, registered
// (`out_valid` follows `en` by one clock).  A `seed_load` pulse reseeds the
// generator; the first number of the new sequence appears one clock after
// the first enabled clock that follows.
//
// Following the described system: a PCG core streaming 32-bit floating-point
// uniforms in [0, 1) continuously (125 MSps at a 125 MHz clock).  The PCG32
// variant, the seeding and the 24-bit float conversion are this design's
// choices.
module pcg_rng #(
  parameter logic [63:0] DEFAULT_SEED = 64'd42,
  parameter logic [63:0] DEFAULT_SEQ  = 64'd54
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        seed_load,
  input  logic [63:0] seed,
  input  logic [63:0] seq,
  output logic        out_valid,
  output logic [31:0] out_u32,
  output logic [31:0] out_f32
);

  localparam logic [63:0] MULT = 64'd6364136223846793005;

  logic [63:0] state, inc;
  logic [31:0] xsh;
  logic [4:0]  rot;
  logic [31:0] u32;
  logic [23:0] frac;
  logic [4:0]  lz;
  logic [31:0] f32;

  function automatic logic [63:0] seed_state(input logic [63:0] s, input logic [63:0] i);
    return ((i + s) * MULT) + i;
  endfunction

  always_comb begin
    xsh  = 32'(((state >> 18) ^ state) >> 27);
    rot  = state[63:59];
    u32  = (xsh >> rot) | (xsh << (6'd32 - {1'b0, rot}));
    frac = u32[31:8];
    lz   = '0;
    for (int b = 0; b < 24; b++)
      if (frac[b]) lz = 5'(23 - b);
    if (frac == '0) f32 = '0;
    else            f32 = {1'b0, 8'(8'd126 - {3'b0, lz}), 23'(frac << lz)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inc       <= (DEFAULT_SEQ << 1) | 64'd1;
      state     <= seed_state(DEFAULT_SEED, (DEFAULT_SEQ << 1) | 64'd1);
      out_valid <= 1'b0;
      out_u32   <= '0;
      out_f32   <= '0;
    end else if (seed_load) begin
      inc       <= (seq << 1) | 64'd1;
      state     <= seed_state(seed, (seq << 1) | 64'd1);
      out_valid <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) begin
        state   <= state * MULT + inc;
        out_u32 <= u32;
        out_f32 <= f32;
      end
    end
  end

endmodule
