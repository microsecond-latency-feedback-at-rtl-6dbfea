// tb_pcg_rng - self-checking test of the PCG32 generator.
// 1. After reset (seed 42, sequence 54) the first six numbers must equal the
//    published pcg32 demo output for that seed.
// 2. After reseeding with random seeds, a software PCG32 in the testbench must
//    match every output.
// 3. Every float output must equal (u32 >> 8) / 2^24 exactly.
// 4. One number per clock while enabled, none while disabled.
module tb_pcg_rng;

  logic clk = 0, rst_n = 0;
  logic en = 0, seed_load = 0;
  logic [63:0] seed = '0, seq = '0;
  logic out_valid;
  logic [31:0] out_u32, out_f32;

  int checks = 0, failures = 0;

  pcg_rng dut (.*);

  always #4 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // software reference
  longint unsigned s, inc;
  localparam longint unsigned MULT = 64'd6364136223846793005;

  function automatic int unsigned ref_next();
    longint unsigned old;
    int unsigned xs, r;
    old = s;
    s   = old * MULT + inc;
    xs  = int'((((old >> 18) ^ old) >> 27) & 64'hffffffff);
    r   = int'(old >> 59);
    return (xs >> r) | (xs << ((32 - r) & 31));
  endfunction

  task automatic ref_seed(input longint unsigned sd, input longint unsigned sq);
    inc = (sq << 1) | 1;
    s   = 0;
    void'(ref_next());
    s  += sd;
    void'(ref_next());
  endtask

  // decode a non-negative single-precision number by hand
  function automatic real f32_value(input logic [31:0] f);
    real v;
    if (f[30:23] == 0) return 0.0;
    v = 1.0 + real'(f[22:0]) / 8388608.0;
    for (int e = int'(f[30:23]); e < 127; e++) v = v / 2.0;
    return v;
  endfunction

  task automatic check_float();
    real expected;
    checks++;
    expected = real'(out_u32 >> 8) / 16777216.0;
    if (f32_value(out_f32) != expected) begin
      failures++;
      $display("float %h for %h, expected %f", out_f32, out_u32, expected);
    end
  endtask

  int unsigned demo [6] = '{32'ha15c02b7, 32'h7b47f409, 32'hba1d3330,
                            32'h83d2f293, 32'hbfa4784b, 32'hcbed606e};

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      checks++;
      if (!out_valid || out_u32 !== demo[i]) begin
        failures++;
        $display("demo value %0d: %h expected %h", i, out_u32, demo[i]);
      end
      check_float();
    end
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      seed = {$urandom, $urandom};
      seq  = {$urandom, $urandom};
      ref_seed(seed, seq);
      seed_load = 1;
      @(negedge clk);
      seed_load = 0;
      n = 0;
      for (int c = 0; c < 400; c++) begin
        en = ($urandom_range(4) != 0);
        @(negedge clk);
        checks++;
        if (out_valid != en) begin
          failures++;
          $display("out_valid %0b with en %0b", out_valid, en);
        end
        if (out_valid) begin
          int unsigned r;
          r = ref_next();
          checks++;
          if (out_u32 !== r) begin
            failures++;
            $display("seed %0d value %0d: %h expected %h", k, n, out_u32, r);
          end
          check_float();
          n++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
