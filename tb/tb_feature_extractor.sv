// tb_feature_extractor: loads a 6-row x 6-column x 12-channel input tile,
// random 4-bit kernel indices and two 16-entry codebooks per output channel
// (two groups of 6 channels), runs one pass and compares all 4x16x4 output
// pixels with a real-valued clustered convolution. Checks the pass length,
// ngrp*(w_in+1)*3*gs + 2 cycles, then the pooled 4-bit features delivered
// to the HDC port after the automatic drain (floor(sum(ReLU)*pscale)).
`timescale 1ns/1ps
module tb_feature_extractor;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int WI = 6, CI = 12, GS = 6, NG = 2, WO = WI - 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  conv_cfg_t conv_cfg;
  afu_cfg_t  afu_cfg;
  logic act_wr_en, act_swap, act_rd_half, idx_wr_en, wgt_wr_en, run, pool_start, pool_clear, busy, pass_done;
  logic hrd_en, fw_en;
  logic [1:0] act_wr_bank, hrd_row;
  logic [12:0] act_wr_addr;
  bf16_t act_wr_data, wgt_wr_data, hrd_data;
  logic [3:0] idx_wr_bank, wgt_wr_bank, hrd_ch;
  logic [8:0] idx_wr_addr;
  kidx_t idx_wr_data;
  logic [6:0] wgt_wr_addr;
  logic [5:0] hrd_col;
  logic [9:0] fw_idx;
  logic [7:0] fw_data;
  bf16_t A [6][WI][CI];
  kidx_t IX [16][CI];
  bf16_t CB [16][NG][16];
  real   outv [WO][4][16], outm [WO][4][16], pool [16];
  int checks = 0, failures = 0, cyc = 0, nfeat = 0;

  feature_extractor dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (fw_en) begin
    real e;
    e = pool[fw_idx[3:0]] / 16.0; if (e > 15.0) e = 15.0;
    checks++;
    if (fw_idx >= 16 || (int'(fw_data) - $rtoi(e) > 1) || ($rtoi(e) - int'(fw_data) > 1)) begin
      failures++; $display("FAIL feature %0d: %0d vs %f", fw_idx, fw_data, e);
    end
    nfeat++;
  end
  initial begin
    int t0;
    {act_wr_en, act_swap, idx_wr_en, wgt_wr_en, run, pool_start, pool_clear, hrd_en} = '0;
    act_wr_bank = 0; act_wr_addr = 0; act_wr_data = 0; idx_wr_bank = 0; idx_wr_addr = 0; idx_wr_data = 0;
    wgt_wr_bank = 0; wgt_wr_addr = 0; wgt_wr_data = 0; hrd_col = 0; hrd_row = 0; hrd_ch = 0;
    conv_cfg = '0; conv_cfg.w_in = WI; conv_cfg.gs = GS; conv_cfg.ngrp = NG; conv_cfg.row0 = 0;
    conv_cfg.pitch = WI * CI; conv_cfg.cin = CI; conv_cfg.ch0 = 0;
    afu_cfg = '0; afu_cfg.opitch = 100; afu_cfg.cout = 16; afu_cfg.wb_en = 1; afu_cfg.pool_en = 1;
    afu_cfg.pscale = 16'h3D80; afu_cfg.npool = 16;   // 1/16
    for (int y = 0; y < 6; y++) for (int x = 0; x < WI; x++) for (int c = 0; c < CI; c++)
      A[y][x][c] = real_to_bf16(real'($urandom_range(0, 15)) / 8.0);
    for (int k = 0; k < 16; k++) begin
      for (int c = 0; c < CI; c++) IX[k][c] = kidx_t'({$urandom, $urandom});
      for (int g = 0; g < NG; g++) for (int n = 0; n < 16; n++)
        CB[k][g][n] = real_to_bf16((real'($urandom_range(0, 40)) - 16.0) / 16.0);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // load activations into the fill half, then swap it to the PEs
    for (int y = 0; y < 6; y++) for (int x = 0; x < WI; x++) for (int c = 0; c < CI; c++) begin
      @(negedge clk); act_wr_en = 1; act_wr_bank = 2'(y % 4);
      act_wr_addr = 13'((y / 4) * WI * CI + x * CI + c); act_wr_data = A[y][x][c];
    end
    @(negedge clk); act_wr_en = 0; act_swap = 1; @(negedge clk); act_swap = 0;
    checks++; if (act_rd_half !== 1'b1) begin failures++; $display("FAIL swap"); end
    for (int k = 0; k < 16; k++) begin
      for (int c = 0; c < CI; c++) begin
        @(negedge clk); idx_wr_en = 1; idx_wr_bank = 4'(k); idx_wr_addr = 9'(c); idx_wr_data = IX[k][c];
      end
      for (int g = 0; g < NG; g++) for (int n = 0; n < 16; n++) begin
        @(negedge clk); idx_wr_en = 0; wgt_wr_en = 1; wgt_wr_bank = 4'(k); wgt_wr_addr = 7'(g * 16 + n); wgt_wr_data = CB[k][g][n];
      end
      @(negedge clk); wgt_wr_en = 0;
    end
    // reference
    for (int k = 0; k < 16; k++) pool[k] = 0.0;
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      outv[x][r][k] = 0.0; outm[x][r][k] = 0.0;
      for (int c = 0; c < CI; c++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        real p;
        p = bf16_to_real(A[r+ky][x+kx][c]) * bf16_to_real(CB[k][c / GS][IX[k][c][4*(3*ky+kx) +: 4]]);
        outv[x][r][k] += p; outm[x][r][k] += (p < 0) ? -p : p;
      end
      if (outv[x][r][k] > 0) pool[k] += outv[x][r][k];
    end
    @(negedge clk); run = 1; t0 = cyc; @(negedge clk); run = 0;
    while (!pass_done) @(negedge clk);
    checks++;
    if (cyc - t0 != NG * (WI + 1) * 3 * GS + 2) begin failures++; $display("FAIL pass took %0d", cyc - t0); end
    while (busy) @(negedge clk);
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      @(negedge clk); hrd_en = 1; hrd_col = 6'(x); hrd_row = 2'(r); hrd_ch = 4'(k);
      @(negedge clk); hrd_en = 0;
      checks++;
      if (!close_mag(bf16_to_real(hrd_data), outv[x][r][k], outm[x][r][k], 0.04)) begin
        failures++; $display("FAIL out x%0d r%0d k%0d: %f vs %f", x, r, k, bf16_to_real(hrd_data), outv[x][r][k]);
      end
    end
    @(negedge clk); pool_start = 1; @(negedge clk); pool_start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++; if (nfeat != 16) begin failures++; $display("FAIL %0d features", nfeat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
