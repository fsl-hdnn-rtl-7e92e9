// tb_idx_mem: writes random words into every bank and address, then reads all
// 16 banks at one shared address and compares each column's word with a
// model, checking the one-cycle read latency.
`timescale 1ns/1ps
module tb_idx_mem;
  import fsl_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [3:0] wr_bank;
  logic [8:0] wr_addr, rd_addr;
  kidx_t wr_data, rd_data [16];
  kidx_t model [16][512];
  int checks = 0, failures = 0;
  idx_mem dut (.*);
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int b = 0; b < 16; b++) for (int a = 0; a < 512; a++) begin
      @(negedge clk); wr_en = 1; wr_bank = 4'(b); wr_addr = 9'(a); wr_data = kidx_t'({$urandom, $urandom});
      model[b][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 9'((512 - 1 - a));
      @(negedge clk); rd_en = 0;
      for (int b = 0; b < 16; b++) begin
        checks++;
        if (rd_data[b] !== model[b][512 - 1 - a]) begin failures++; $display("FAIL bank %0d addr %0d", b, a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
