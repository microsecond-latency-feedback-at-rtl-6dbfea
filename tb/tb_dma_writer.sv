// tb_dma_writer - self-checking test of the experience DMA.
// Offers random records with random gaps while a memory model accepts words
// with random readiness and stores them.  Checks every address and data word
// against the expected layout (base + (n*10 + w)*4; mean, noise, x(t)..x(t-7)
// sign-extended), the record counter, the per-episode limit (records beyond
// it are dropped and counted), the restart at the base address on a new
// episode, and one word per clock when memory is always ready.
module tb_dma_writer;
  import kf_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] cfg_base = 32'h1000;
  logic [15:0] cfg_max_rec = 16'd40;
  logic rec_valid = 0, rec_ready;
  exp_rec_t rec = '0;
  logic mem_valid, mem_ready = 0;
  logic [31:0] mem_addr, mem_data;
  logic [15:0] rec_cnt;
  logic [31:0] dropped_cnt;

  int checks = 0, failures = 0;

  dma_writer dut (.*);

  always #4 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] exp_words [$];
  logic [31:0] exp_addr;
  int words_seen = 0;
  bit fast = 0;
  int fast_cycles = 0;

  function automatic logic [31:0] sx(input q_t v);
    return 32'(v);
  endfunction

  // memory model
  always @(posedge clk) begin
    if (rst_n && mem_valid && mem_ready) begin
      logic [31:0] e;
      checks += 2;
      e = exp_words.pop_front();
      if (mem_addr !== exp_addr) begin
        failures++;
        $display("address %h expected %h", mem_addr, exp_addr);
      end
      if (mem_data !== e) begin
        failures++;
        $display("data %h expected %h at %h", mem_data, e, mem_addr);
      end
      exp_addr = exp_addr + 4;
      words_seen++;
    end
    if (fast && mem_valid) fast_cycles++;
  end

  task automatic episode(input int nrec, input bit stall);
    int accepted = 0;
    bit taken;
    @(negedge clk);
    start = 1;
    exp_addr = cfg_base;
    @(negedge clk);
    start = 0;
    for (int n = 0; n < nrec; n++) begin
      rec.mean  = q_t'($urandom);
      rec.noise = q_t'($urandom);
      for (int k = 0; k < 8; k++) rec.obs[k] = q_t'($urandom);
      rec_valid = 1;
      taken = 0;
      while (!taken) begin
        mem_ready = stall ? ($urandom_range(2) == 0) : 1'b1;
        #1 taken = rec_ready;    // sampled between edges, stable until the edge
        @(posedge clk);
        #1;
        if (!taken) @(negedge clk);
      end
      // taken on this edge
      if (accepted < int'(cfg_max_rec)) begin
        exp_words.push_back(sx(rec.mean));
        exp_words.push_back(sx(rec.noise));
        for (int k = 0; k < 8; k++) exp_words.push_back(sx(rec.obs[k]));
      end
      accepted++;
      @(negedge clk);
      rec_valid = 0;
      repeat ($urandom_range(3)) begin
        mem_ready = stall ? ($urandom_range(2) == 0) : 1'b1;
        @(negedge clk);
      end
    end
    mem_ready = 1;
    repeat (15) @(negedge clk);
    checks += 2;
    if (exp_words.size() != 0) begin failures++; $display("%0d words not written", exp_words.size()); end
    if (rec_cnt != 16'((nrec < int'(cfg_max_rec)) ? nrec : int'(cfg_max_rec))) begin
      failures++;
      $display("rec_cnt %0d", rec_cnt);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    episode(30, 1);
    checks++;
    if (dropped_cnt != 0) begin failures++; $display("unexpected drops"); end
    cfg_base = 32'h8000;
    episode(50, 1);           // 10 beyond the limit
    checks++;
    if (dropped_cnt != 10) begin failures++; $display("dropped %0d, expected 10", dropped_cnt); end
    // throughput: one record, memory always ready -> 10 consecutive words
    cfg_base = 32'h0;
    fast = 1;
    episode(1, 0);
    fast = 0;
    checks++;
    if (fast_cycles != 10) begin failures++; $display("record took %0d clocks", fast_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
