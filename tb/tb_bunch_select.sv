// tb_bunch_select - self-checking test of bunch selection and gain/offset.
// Streams turns of NB bunches with random gaps, random samples, several bunch
// indices and gains (including saturating ones), and compares every selected
// sample with an integer model: floor((x - offset) * gain / 4096), clamped to
// 16 bits.  Also checks one output per turn and the one-clock latency.
module tb_bunch_select;
  import kf_pkg::*;

  localparam int NB = 20;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic signed [15:0] in_sample = '0;
  logic [7:0] cfg_bunch = '0;
  q_t cfg_gain = '0, cfg_offset = '0;
  logic out_valid;
  q_t out_sample;

  int checks = 0, failures = 0;

  bunch_select dut (.*);

  always #4 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic q_t model(input int x, input int off, input int g);
    longint p;
    p = longint'(x - off) * longint'(g);
    p = p >>> 12;
    if (p > 32767) p = 32767;
    if (p < -32768) p = -32768;
    return q_t'(p);
  endfunction

  q_t expected, exp_hold;
  bit pending = 0;
  int outs_in_turn;

  // compare the output one clock after the selected beat
  always @(posedge clk) begin
    if (rst_n) begin
      if (pending) begin
        checks++;
        if (!out_valid || out_sample !== exp_hold) begin
          failures++;
          $display("mismatch: valid=%0b got %0d exp %0d", out_valid, out_sample, exp_hold);
        end
      end else if (out_valid) begin
        failures++;
        $display("unexpected output %0d", out_sample);
      end
      if (out_valid) outs_in_turn++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cfg = 0; cfg < 6; cfg++) begin
      cfg_bunch  = 8'($urandom_range(NB - 1));
      cfg_gain   = (cfg == 5) ? 16'sh7fff : q_t'($urandom_range(8000) - 2000);
      cfg_offset = q_t'($urandom_range(200) - 100);
      for (int turn = 0; turn < 20; turn++) begin
        outs_in_turn = 0;
        for (int b = 0; b < NB; b++) begin
          // random idle beats inside the turn
          while ($urandom_range(3) == 0) begin
            @(negedge clk);
            in_valid = 0;
            @(posedge clk);
            #1 pending = 0;
          end
          @(negedge clk);
          in_valid  = 1;
          in_first  = (b == 0);
          in_sample = 16'($urandom);
          expected  = model(int'(in_sample), int'(cfg_offset), int'(cfg_gain));
          @(posedge clk);
          #1 pending = (b == int'(cfg_bunch));
          exp_hold = expected;
        end
        @(negedge clk);
        in_valid = 0;
        @(posedge clk);
        #1 pending = 0;
        @(posedge clk);
        checks++;
        if (outs_in_turn != 1) begin
          failures++;
          $display("turn had %0d outputs", outs_in_turn);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
