// tb_param_regs - self-checking test of the parameter/status register file.
// Writes random values to every weight, bias and configuration register and
// checks both the decoded outputs and the read-back against a testbench copy.
// Checks reset values, the self-clearing control pulses, status read-back and
// that unmapped addresses read zero and writes to them change nothing.
module tb_param_regs;
  import kf_pkg::*;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [9:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic arm, halt, seed_load, relu_en;
  logic [15:0] n_steps;
  logic [7:0] bunch;
  q_t gain, offset, sigma, b2;
  logic [15:0] hid_mask;
  logic [31:0] dma_base;
  logic [63:0] seed, seq;
  q_t [15:0][7:0] w1;
  q_t [15:0] b1, w2;
  ctrl_state_e st_state = ST_RUN;
  logic [15:0] st_steps = 16'd1234, st_records = 16'd777;
  logic [31:0] st_overrun = 32'd5, st_overflow = 32'd6, st_dropped = 32'd7;

  int checks = 0, failures = 0;

  param_regs dut (.*);

  always #4 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_addr = 10'(a); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic expect_rd(input int a, input logic [31:0] e);
    rd_addr = 10'(a);
    #1;
    checks++;
    if (rd_data !== e) begin
      failures++;
      $display("read %h = %h, expected %h", a, rd_data, e);
    end
  endtask

  task automatic expect_eq(input string what, input longint got, input longint e);
    checks++;
    if (got != e) begin
      failures++;
      $display("%s = %0d, expected %0d", what, got, e);
    end
  endtask

  function automatic logic [31:0] sx(input logic [15:0] v);
    return {{16{v[15]}}, v};
  endfunction

  logic [15:0] mw1 [16][8], mb1 [16], mw2 [16];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // reset values
    expect_eq("relu_en", relu_en, 1);
    expect_eq("n_steps", n_steps, 2048);
    expect_eq("gain", gain, 4096);
    expect_eq("hid_mask", hid_mask, 16'hffff);
    expect_eq("sigma", sigma, 0);
    // network parameters
    for (int h = 0; h < 16; h++) begin
      for (int i = 0; i < 8; i++) begin
        mw1[h][i] = 16'($urandom);
        wr(32'h80 + 8 * h + i, {16'hdead, mw1[h][i]});
      end
      mb1[h] = 16'($urandom);
      wr(32'h10 + h, 32'(mb1[h]));
      mw2[h] = 16'($urandom);
      wr(32'h20 + h, 32'(mw2[h]));
    end
    for (int h = 0; h < 16; h++) begin
      for (int i = 0; i < 8; i++) begin
        expect_eq("w1", w1[h][i], longint'(signed'(mw1[h][i])));
        expect_rd(32'h80 + 8 * h + i, sx(mw1[h][i]));
      end
      expect_eq("b1", b1[h], longint'(signed'(mb1[h])));
      expect_rd(32'h10 + h, sx(mb1[h]));
      expect_eq("w2", w2[h], longint'(signed'(mw2[h])));
      expect_rd(32'h20 + h, sx(mw2[h]));
    end
    // configuration
    wr(1, 0);          expect_eq("relu_en", relu_en, 0);        expect_rd(1, 0);
    wr(2, 100);        expect_eq("n_steps", n_steps, 100);      expect_rd(2, 100);
    wr(3, 37);         expect_eq("bunch", bunch, 37);           expect_rd(3, 37);
    wr(4, 16'hf000);   expect_eq("gain", gain, -4096);          expect_rd(4, 32'hfffff000);
    wr(5, 12);         expect_eq("offset", offset, 12);         expect_rd(5, 12);
    wr(6, 2048);       expect_eq("sigma", sigma, 2048);         expect_rd(6, 2048);
    wr(7, 16'h0fff);   expect_eq("hid_mask", hid_mask, 16'h0fff); expect_rd(7, 16'h0fff);
    wr(8, 16'h8001);   expect_eq("b2", b2, -32767);             expect_rd(8, 32'hffff8001);
    wr(9, 32'h4000_0000); expect_eq("dma_base", dma_base, 32'h4000_0000);
    wr(10, 32'h11111111); wr(11, 32'h22222222);
    wr(12, 32'h33333333); wr(13, 32'h44444444);
    expect_eq("seed", seed, 64'h2222222211111111);
    expect_eq("seq", seq, 64'h4444444433333333);
    expect_rd(11, 32'h22222222);
    // control pulses last one clock
    @(negedge clk);
    wr_en = 1; wr_addr = 0; wr_data = 32'h7;
    @(negedge clk);
    wr_en = 0;
    expect_eq("arm", arm, 1); expect_eq("halt", halt, 1); expect_eq("seed_load", seed_load, 1);
    @(negedge clk);
    expect_eq("arm", arm, 0); expect_eq("halt", halt, 0); expect_eq("seed_load", seed_load, 0);
    // status
    expect_rd(32'h100, 2);
    expect_rd(32'h101, 1234);
    expect_rd(32'h102, 5);
    expect_rd(32'h103, 6);
    expect_rd(32'h104, 777);
    expect_rd(32'h105, 7);
    // unmapped
    wr(32'h3f0, 32'hffffffff);
    expect_rd(32'h3f0, 0);
    expect_rd(32'h040, 0);
    expect_eq("n_steps unchanged", n_steps, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
