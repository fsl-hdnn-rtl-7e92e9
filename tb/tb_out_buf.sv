// tb_out_buf: writes a first channel-group result into several columns,
// accumulates two more groups on top, and reads every pixel back one at a
// time, comparing with the real-valued sum of the three groups.
`timescale 1ns/1ps
module tb_out_buf;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int NC = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_acc, rd_en;
  logic [5:0] wr_col, rd_col;
  logic [1:0] rd_row;
  logic [3:0] rd_ch;
  bf16_t wr_data [4][16];
  bf16_t rd_data;
  real   ref_v [NC][4][16];
  int checks = 0, failures = 0;
  out_buf dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; wr_acc = 0; rd_en = 0; wr_col = 0; rd_col = 0; rd_row = 0; rd_ch = 0;
    for (int g = 0; g < 3; g++)
      for (int x = 0; x < NC; x++) begin
        @(negedge clk); wr_en = 1; wr_acc = (g != 0); wr_col = 6'(x);
        for (int r = 0; r < 4; r++) for (int c = 0; c < 16; c++) begin
          wr_data[r][c] = real_to_bf16((real'($urandom_range(0, 64)) - 32.0) / 8.0);
          ref_v[x][r][c] = ((g == 0) ? 0.0 : ref_v[x][r][c]) + bf16_to_real(wr_data[r][c]);
        end
      end
    @(negedge clk); wr_en = 0;
    for (int x = 0; x < NC; x++) for (int r = 0; r < 4; r++) for (int c = 0; c < 16; c++) begin
      @(negedge clk); rd_en = 1; rd_col = 6'(x); rd_row = 2'(r); rd_ch = 4'(c);
      @(negedge clk); rd_en = 0;
      checks++;
      if (!close_mag(bf16_to_real(rd_data), ref_v[x][r][c], 12.0, 0.01)) begin
        failures++; $display("FAIL x%0d r%0d c%0d: %f vs %f", x, r, c, bf16_to_real(rd_data), ref_v[x][r][c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
