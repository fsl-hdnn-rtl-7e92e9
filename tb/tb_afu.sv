// tb_afu: serves a modelled output buffer (one-cycle read latency) holding
// random positive and negative pixels, runs a drain with write-back and
// pooling enabled, and checks every activation-memory write (bank, address,
// ReLU value) and its count; a second drain of other pixels adds to the same
// pooling sums (two shots of one class). A pool operation must then deliver
// floor(sum*pscale) clamped to 4 bits for each channel, and a second pool
// must see cleared accumulators. Also checks the drain cycle count.
`timescale 1ns/1ps
module tb_afu;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int WO = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  afu_cfg_t cfg;
  logic drain_start, pool_start, pool_clear, busy, ob_rd_en, aw_en, fw_en;
  logic [7:0] wout;
  logic [5:0] ob_rd_col;
  logic [1:0] ob_rd_row, aw_bank;
  logic [3:0] ob_rd_ch;
  bf16_t ob_rd_data, aw_data;
  logic [12:0] aw_addr;
  logic [9:0] fw_idx;
  logic [7:0] fw_data;
  bf16_t ob [WO][4][16];
  real   psum [48];
  int checks = 0, failures = 0, nwr = 0, nfw = 0, cyc = 0;
  afu dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (ob_rd_en) ob_rd_data <= ob[ob_rd_col][ob_rd_row][ob_rd_ch];
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // every write-back must match the ReLU of some pixel at the computed address
  always @(negedge clk) if (aw_en) begin
    int found;
    found = 0;
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      int y;
      y = 4 + r;
      if (aw_bank == 2'(y % 4) && aw_addr == 13'((y / 4) * 200 + x * 40 + 16 + k)) begin
        found = 1;
        checks++;
        if (aw_data !== (ob[x][r][k][15] ? 16'h0 : ob[x][r][k])) begin
          failures++; $display("FAIL write x%0d r%0d k%0d", x, r, k);
        end
      end
    end
    if (!found) begin failures++; $display("FAIL stray write bank %0d addr %0d", aw_bank, aw_addr); end
    nwr++;
  end
  bit second = 0;
  always @(posedge clk) if (fw_en) begin
    real e;
    e = second ? 0.0 : psum[fw_idx] * 0.25;
    if (e > 15.0) e = 15.0;
    checks++;
    if (fw_data != 8'($rtoi(e))) begin failures++; $display("FAIL pool ch %0d: %0d vs %f", fw_idx, fw_data, e); end
    nfw++;
  end
  task automatic drain_once();
    int t0;
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      ob[x][r][k] = real_to_bf16((real'($urandom_range(0, 40)) - 10.0) / 4.0);
      if (!ob[x][r][k][15] && (16 + k) < 48) psum[16 + k] += bf16_to_real(ob[x][r][k]);
    end
    @(negedge clk); drain_start = 1; t0 = cyc; @(negedge clk); drain_start = 0;
    while (busy) @(negedge clk);
    checks++;
    if (cyc - t0 != WO * 64 + 2) begin failures++; $display("FAIL drain took %0d cycles", cyc - t0); end
  endtask
  initial begin
    cfg = '0; cfg.orow0 = 4; cfg.opitch = 200; cfg.cout = 40; cfg.coff = 16; cfg.wb_en = 1;
    cfg.pool_en = 1; cfg.pscale = 16'h3E80; cfg.npool = 48;   // pscale = 0.25
    drain_start = 0; pool_start = 0; pool_clear = 0; wout = 8'(WO);
    for (int c = 0; c < 48; c++) psum[c] = 0.0;
    repeat (3) @(posedge clk); rst_n = 1;
    drain_once();
    drain_once();
    checks++; if (nwr != 2 * WO * 64) begin failures++; $display("FAIL %0d writes", nwr); end
    @(negedge clk); pool_start = 1; @(negedge clk); pool_start = 0;
    while (busy) @(negedge clk);
    @(negedge clk); second = 1; pool_start = 1; @(negedge clk); pool_start = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (nfw != 96) begin failures++; $display("FAIL %0d feature writes", nfw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
