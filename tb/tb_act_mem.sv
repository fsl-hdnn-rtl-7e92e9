// tb_act_mem: fills the fill half with random words, swaps, reads all four
// banks of the compute half in parallel and compares with a model; then
// checks that writes after a swap land in the other half and do not disturb
// the half being read, and that read data arrive one cycle after rd_en.
`timescale 1ns/1ps
module tb_act_mem;
  import fsl_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap, rd_half, wr_en, rd_en;
  logic [1:0] wr_bank;
  logic [5:0] wr_addr;
  logic [5:0] rd_addr [4];
  bf16_t wr_data, rd_data [4];
  bf16_t model [2][4][DEPTH];
  int checks = 0, failures = 0;
  act_mem #(.DEPTH(DEPTH)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic fill(int half);
    for (int b = 0; b < 4; b++) for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_bank = 2'(b); wr_addr = 6'(a); wr_data = 16'($urandom);
      model[half][b][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
  endtask
  task automatic check_half(int half);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1;
      for (int b = 0; b < 4; b++) rd_addr[b] = 6'((a + 7*b) % DEPTH);
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (rd_data[b] !== model[half][b][(a + 7*b) % DEPTH]) begin
          failures++; $display("FAIL half %0d bank %0d addr %0d", half, b, a);
        end
      end
    end
  endtask
  initial begin
    {swap, wr_en, rd_en} = '0; wr_bank = 0; wr_addr = 0; wr_data = 0;
    for (int b = 0; b < 4; b++) rd_addr[b] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (rd_half !== 1'b0) failures++;
    fill(1);                                   // rd_half = 0 -> fill half 1
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    checks++; if (rd_half !== 1'b1) failures++;
    fill(0);                                   // while reading half 1, fill half 0
    check_half(1);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check_half(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
