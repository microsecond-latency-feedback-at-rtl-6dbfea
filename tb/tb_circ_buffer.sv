// tb_circ_buffer - self-checking test of the eight-sample circular buffer.
// Writes random samples with random gaps and, one clock after each write,
// compares the whole observation vector with a history kept by the testbench
// (newest first, zeros before the first writes).  Also checks the one-clock
// out_valid timing and that obs is unchanged between writes.
module tb_circ_buffer;
  import kf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  q_t in_sample = '0;
  logic out_valid;
  q_t [7:0] obs;

  int checks = 0, failures = 0;
  q_t hist [8];

  circ_buffer dut (.*);

  always #4 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (obs[k] !== hist[k]) begin
        failures++;
        $display("obs[%0d]=%0d expected %0d", k, obs[k], hist[k]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < 8; k++) hist[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    compare();
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid  = 1;
      in_sample = q_t'($urandom);
      for (int k = 7; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = in_sample;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("out_valid missing after write %0d", n);
      end
      compare();
      repeat ($urandom_range(3)) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin
          failures++;
          $display("out_valid without a write");
        end
        compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
