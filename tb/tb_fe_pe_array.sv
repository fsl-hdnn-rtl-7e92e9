// tb_fe_pe_array: runs the full 4x16 array over a strip of W input columns,
// C channels, with different activations per row and different kernel
// indices and codebooks per column, and checks all 4x16x(W-2) output pixels
// against a real-valued clustered convolution, plus the result timing.
`timescale 1ns/1ps
module tb_fe_pe_array;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int C = 6, W = 6, SLOT = 3*C, R = 4, K = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_en, mac_en, mac_last, out_valid;
  bf16_t act [R];
  bf16_t w [K];
  bf16_t out_data [R][K];
  kidx_t kidx [K];
  logic [1:0] ky, phase;
  logic [IDX_W-1:0] mac_addr;
  int checks = 0, failures = 0, cyc = 0, got = 0;
  bf16_t a_b [R][C][3][W];
  kidx_t idx [K][C];
  bf16_t cb  [K][NCB];

  fe_pe_array dut (.*);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real ref_out(int r, int k, int ox, bit mag);
    real s = 0.0, p;
    for (int c = 0; c < C; c++) for (int y = 0; y < 3; y++) for (int kx = 0; kx < 3; kx++) begin
      p = bf16_to_real(a_b[r][c][y][ox+kx]) * bf16_to_real(cb[k][idx[k][c][4*(3*y+kx) +: 4]]);
      s += (mag && p < 0) ? -p : p;
    end
    return s;
  endfunction

  int t0;
  initial begin
    for (int k = 0; k < K; k++) begin
      for (int n = 0; n < NCB; n++) cb[k][n] = real_to_bf16((real'($urandom_range(0, 40)) - 20.0) / 16.0);
      for (int c = 0; c < C; c++) idx[k][c] = kidx_t'({$urandom, $urandom});
    end
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int y = 0; y < 3; y++) for (int x = 0; x < W; x++)
      a_b[r][c][y][x] = real_to_bf16(real'($urandom_range(0, 15)) / 4.0);
    {acc_en, mac_en, mac_last} = '0; ky = 0; phase = 0; mac_addr = 0;
    for (int r = 0; r < R; r++) act[r] = '0;
    for (int k = 0; k < K; k++) begin w[k] = '0; kidx[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    for (int x = 0; x <= W; x++) begin
      for (int t = 0; t < SLOT; t++) begin
        @(negedge clk);
        phase = 2'(x); acc_en = (x < W); ky = 2'(t % 3);
        for (int r = 0; r < R; r++) act[r] = (x < W) ? a_b[r][t/3][t%3][x] : '0;
        for (int k = 0; k < K; k++) begin kidx[k] = idx[k][t/3]; w[k] = cb[k][t % NCB]; end
        mac_en = (t < NCB); mac_addr = IDX_W'(t); mac_last = (t == NCB - 1);
      end
    end
    @(negedge clk); acc_en = 0; mac_en = 0; mac_last = 0;
    repeat (3) @(posedge clk);
    checks++; if (got != W - 2) begin failures++; $display("FAIL: %0d result cycles", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    int ox;
    ox = (cyc - t0 - 1) / SLOT - 3;
    if (ox >= 0 && ox <= W - 3) begin
      got++;
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) begin
        checks++;
        if (!close_mag(bf16_to_real(out_data[r][k]), ref_out(r, k, ox, 0), ref_out(r, k, ox, 1), 0.03)) begin
          failures++; $display("FAIL r%0d k%0d ox%0d: %f vs %f", r, k, ox, bf16_to_real(out_data[r][k]), ref_out(r, k, ox, 0));
        end
      end
      checks++;
      if ((cyc - t0 - 1) % SLOT != NCB) begin failures++; $display("FAIL timing"); end
    end
  end
endmodule
