// tb_fe_pe: drives one PE through a strip of W input columns x C channels x 3
// kernel rows, exactly as the feature-extractor sequencer does (slot of 3*C
// cycles per input column, phase = column mod 4, multiply steps 0..NCB-1 at
// the start of each slot), and compares each output pixel with a clustered
// 3x3 convolution computed in real arithmetic. It also checks the cycle at
// which each result appears: pixel ox is ready NCB+1 cycles into slot ox+3.
`timescale 1ns/1ps
module tb_fe_pe;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int C = 6, W = 8, SLOT = 3*C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_en, mac_en, mac_last, out_valid;
  bf16_t act, w, out_data;
  kidx_t kidx;
  logic [1:0] ky, phase;
  logic [IDX_W-1:0] mac_addr;
  int checks = 0, failures = 0, cyc = 0;
  real   a_r [C][3][W];
  bf16_t a_b [C][3][W];
  kidx_t idx [C];
  bf16_t cb  [NCB];
  real   exp_out [W];
  real   mag_out [W];
  int    got_cnt = 0;

  fe_pe dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int slot_of_cycle;
  initial begin
    for (int k = 0; k < NCB; k++) cb[k] = real_to_bf16((real'($urandom_range(0, 40)) - 20.0) / 16.0);
    for (int c = 0; c < C; c++) begin
      idx[c] = kidx_t'({$urandom, $urandom});
      for (int y = 0; y < 3; y++) for (int x = 0; x < W; x++) begin
        a_b[c][y][x] = real_to_bf16(real'($urandom_range(0, 15)) / 4.0);
        a_r[c][y][x] = bf16_to_real(a_b[c][y][x]);
      end
    end
    for (int ox = 0; ox <= W - 3; ox++) begin
      exp_out[ox] = 0.0; mag_out[ox] = 0.0;
      for (int c = 0; c < C; c++) for (int y = 0; y < 3; y++) for (int kx = 0; kx < 3; kx++) begin
        real p;
        p = a_r[c][y][ox+kx] * bf16_to_real(cb[idx[c][4*(3*y+kx) +: 4]]);
        exp_out[ox] += p; mag_out[ox] += (p < 0) ? -p : p;
      end
    end
    {acc_en, mac_en, mac_last} = '0; act = '0; w = '0; kidx = '0; ky = '0; phase = '0; mac_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int x = 0; x <= W; x++) begin
      for (int t = 0; t < SLOT; t++) begin
        @(negedge clk);
        phase    = 2'(x);
        acc_en   = (x < W);
        act      = (x < W) ? a_b[t/3][t%3][x] : '0;
        kidx     = idx[t/3];
        ky       = 2'(t % 3);
        mac_en   = (t < NCB);
        mac_addr = IDX_W'(t);
        mac_last = (t == NCB - 1);
        w        = cb[t % NCB];
      end
    end
    @(negedge clk); acc_en = 0; mac_en = 0; mac_last = 0;
    repeat (3) @(posedge clk);
    checks++; if (got_cnt != W - 2) begin failures++; $display("FAIL: got %0d results", got_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results: slot s delivers pixel s-3
  int t0 = -1;
  always @(posedge clk) begin
    if (rst_n && t0 < 0) t0 <= cyc;
    if (out_valid) begin
      int s, ox;
      s  = (cyc - t0 - 1) / SLOT;
      ox = s - 3;
      if (ox >= 0 && ox <= W - 3) begin
        checks++;
        if (!close_mag(bf16_to_real(out_data), exp_out[ox], mag_out[ox], 0.03)) begin
          failures++; $display("FAIL pixel %0d: got %f exp %f", ox, bf16_to_real(out_data), exp_out[ox]);
        end
        checks++;
        if ((cyc - t0 - 1) % SLOT != NCB) begin
          failures++; $display("FAIL pixel %0d timing: %0d into slot", ox, (cyc - t0 - 1) % SLOT);
        end
        got_cnt++;
      end
    end
  end
endmodule
