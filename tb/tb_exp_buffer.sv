// tb_exp_buffer - self-checking test of the experience record queue.
// Pushes numbered random records while the consumer takes them with random
// readiness; every record taken must be the next one pushed and not dropped
// (order and contents).  A phase with the consumer stalled pushes more
// records than the queue holds and checks the overflow counter, the level and
// that the records kept are the oldest ones.  Finally checks that clear
// resets the overflow counter.
module tb_exp_buffer;
  import kf_pkg::*;

  localparam int DEPTH = 16;

  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0;
  exp_rec_t in_rec = '0;
  logic out_valid, out_ready = 0;
  exp_rec_t out_rec;
  logic [4:0] level;
  logic [31:0] overflow_cnt;

  int checks = 0, failures = 0;

  exp_buffer dut (.*);

  always #4 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  exp_rec_t model [$];
  int unsigned drops = 0;

  function automatic exp_rec_t rnd_rec();
    exp_rec_t r;
    r.mean  = q_t'($urandom);
    r.noise = q_t'($urandom);
    for (int k = 0; k < 8; k++) r.obs[k] = q_t'($urandom);
    return r;
  endfunction

  // scoreboard on the output side, sampled at the clock edge
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (model.size() == 0) begin
        failures++;
        $display("record out of an empty model");
      end else begin
        exp_rec_t e;
        e = model.pop_front();
        if (out_rec !== e) begin
          failures++;
          $display("record mismatch");
        end
      end
    end
    if (rst_n && in_valid) begin
      if (model.size() < DEPTH || (out_valid && out_ready && model.size() <= DEPTH))
        model.push_back(in_rec);
      else drops++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random traffic
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(2) == 0);
      in_rec    = rnd_rec();
      out_ready = ($urandom_range(3) != 0);
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (out_valid || model.size() != 0) begin
      failures++;
      $display("queue not drained: %0d left", model.size());
    end
    // phase 2: stalled consumer, overfill by 5
    out_ready = 0;
    for (int i = 0; i < DEPTH + 5; i++) begin
      in_valid = 1;
      in_rec   = rnd_rec();
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    checks += 2;
    if (level != 5'(DEPTH)) begin failures++; $display("level %0d", level); end
    if (overflow_cnt != 32'(drops) || drops != 5) begin
      failures++;
      $display("overflow %0d, model drops %0d", overflow_cnt, drops);
    end
    out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (model.size() != 0) begin failures++; $display("kept records not all delivered"); end
    clear = 1;
    @(negedge clk);
    clear = 0;
    checks++;
    if (overflow_cnt != 0) begin failures++; $display("clear ignored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
