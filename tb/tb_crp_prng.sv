// tb_crp_prng: writes a seed block (including an all-zero word, which must
// become 1), loads it, and compares the block after each of 40 steps with a
// bit-serial LFSR model; then reloads and checks that the same sequence
// restarts from the stored initial block.
`timescale 1ns/1ps
module tb_crp_prng;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seed_wr, load, step;
  logic [3:0] seed_idx;
  logic [15:0] seed_data, block [16], model [16], seeds [16];
  int checks = 0, failures = 0;
  crp_prng dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic compare(string what);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (block[i] !== model[i]) begin failures++; $display("FAIL %s row %0d: %h vs %h", what, i, block[i], model[i]); end
    end
  endtask
  initial begin
    {seed_wr, load, step} = '0; seed_idx = 0; seed_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      seeds[i] = (i == 5) ? 16'h0 : 16'($urandom);
      @(negedge clk); seed_wr = 1; seed_idx = 4'(i); seed_data = seeds[i];
    end
    @(negedge clk); seed_wr = 0; load = 1; @(negedge clk); load = 0;
    for (int i = 0; i < 16; i++) model[i] = (seeds[i] == 0) ? 16'h1 : seeds[i];
    compare("load");
    for (int n = 0; n < 40; n++) begin
      step = 1; @(negedge clk);
      for (int i = 0; i < 16; i++) model[i] = lfsr16_adv(model[i]);
      compare("step");
    end
    step = 0; load = 1; @(negedge clk); load = 0;
    for (int i = 0; i < 16; i++) model[i] = (seeds[i] == 0) ? 16'h1 : seeds[i];
    compare("reload");
    step = 1; @(negedge clk); step = 0;
    for (int i = 0; i < 16; i++) model[i] = lfsr16_adv(model[i]);
    compare("restep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
