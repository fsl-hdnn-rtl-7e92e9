// tb_dist_table: random accumulates and direct writes against a model of
// 256 words; clear must zero the lower 128 entries (distance sums) and keep
// the upper 128 (per-block prediction records).
`timescale 1ns/1ps
module tb_dist_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, acc_en, wr_en;
  logic [7:0] acc_addr, wr_addr, rd_addr;
  logic [31:0] acc_val, wr_data, rd_data;
  logic [31:0] model [256];
  int checks = 0, failures = 0;
  dist_table dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check_all();
    for (int i = 0; i < 256; i++) begin
      rd_addr = 8'(i); #1; checks++;
      if (rd_data != model[i]) begin failures++; $display("FAIL %0d: %0d vs %0d", i, rd_data, model[i]); end
    end
  endtask
  initial begin
    {clear, acc_en, wr_en} = '0; acc_addr = 0; wr_addr = 0; rd_addr = 0; acc_val = 0; wr_data = 0;
    for (int i = 0; i < 256; i++) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      acc_en = $urandom_range(0, 1); acc_addr = 8'($urandom); acc_val = 32'($urandom_range(0, 100000));
      wr_en = ($urandom_range(0, 7) == 0); wr_addr = 8'($urandom_range(128, 255)); wr_data = $urandom;
      @(posedge clk); #1;
      if (acc_en) model[acc_addr] += acc_val;
      if (wr_en) model[wr_addr] = wr_data;
      acc_en = 0; wr_en = 0;
    end
    check_all();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 128; i++) model[i] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
