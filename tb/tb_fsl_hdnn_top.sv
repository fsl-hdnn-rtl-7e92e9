// tb_fsl_hdnn_top: chip-level test of fsl_hdnn_top at its default sizes,
// driven only through the 64-bit command and result FIFOs.
//
// Scenario (twice: 16-bit and 1-bit class HVs):
//  * configuration words and 16 PRNG seeds; activations of a 6x6x12 tile
//    written into the fill half of the double buffer, then swapped in;
//    kernel indices and two codebooks per output channel;
//  * RUN_FE: one pass with two channel groups (partial sums accumulate in
//    the output buffer), automatic AFU drain with ReLU write-back into the
//    other activation half; RD_OUT reads back and checks all 256 outputs
//    against a real-valued clustered convolution;
//  * POOL twice after CLR_FEAT: the 16 pooled 4-bit features of two shots
//    accumulate in the feature buffer (batched training); TRAIN a new class;
//  * raw-input bypass: WR_FEAT writes features directly; TRAIN a new class,
//    then an incremental shot into the same class;
//  * the same classes are trained for CONV block 2; INFER blocks 1, 2, 3 on
//    pooled query features; the two blocks agree, so the early exit must
//    fire at block 2.
// Every TRAIN/INFER result is compared with a bit-exact model of the HDC
// path that reads the features the chip actually holds. The output FIFO is
// drained with random backpressure. Counted mechanisms (each must occur):
// swap, group accumulation, write-back, pooling, batched training, bypass,
// new-class training, incremental training, inference, early exit, clock
// gating of each unit, input FIFO full, command stall, output backpressure,
// and both precision modes.
`timescale 1ns/1ps
module tb_fsl_hdnn_top;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int WI = 6, CI = 12, GS = 6, NG = 2, WO = WI - 2;
  localparam int NF = 16, ND = 256, NC = 2;
  logic clk = 0, rst_n = 0, test_en = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, fe_busy, hdc_busy;
  logic [63:0] in_data, out_data;
  fsl_hdnn_top dut (.*);

  int checks = 0, failures = 0;
  typedef enum int {
    M_SWAP, M_GRPACC, M_WB, M_POOL, M_BATCH, M_BYPASS, M_NEW, M_INCR, M_INFER, M_EXIT,
    M_GATE_FE, M_GATE_HDC, M_INFULL, M_STALL, M_OUTBP, M_P16, M_P1, M_NMECH
  } mech_t;
  int mech [M_NMECH];
  string mname [M_NMECH] = '{"swap", "group_accumulate", "write_back", "pooling", "batched_training",
    "raw_bypass", "new_class", "incremental_training", "inference", "early_exit", "gate_fe",
    "gate_hdc", "input_fifo_full", "command_stall", "output_backpressure", "precision_16b", "precision_1b"};

  bf16_t A [6][WI][CI];
  kidx_t IX [16][CI];
  bf16_t CB [16][NG][16];
  real   outv [WO][4][16], outm [WO][4][16];
  logic [15:0] seeds [16];
  int chv [8][ND];
  int fbuf [NF];
  logic [63:0] rq [$];
  conv_cfg_t ccfg;
  afu_cfg_t  acfg;
  hdc_cfg_t  hcfg;
  logic [255:0] cfgv;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- mechanism probes ----------------
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.act_swap) mech[M_SWAP]++;
    if (dut.u_fe.u_ob.wr_en && dut.u_fe.u_ob.wr_acc) mech[M_GRPACC]++;
    if (dut.u_fe.u_afu.aw_en) mech[M_WB]++;
    if (dut.u_fe.u_afu.fw_en) mech[M_POOL]++;
    if (!dut.fe_clk_en && !test_en) mech[M_GATE_FE]++;
    if (!(dut.hdc_clk_en || dut.afu_fw_en) && !test_en) mech[M_GATE_HDC]++;
    if (in_valid && !in_ready) mech[M_INFULL]++;
    if (dut.u_ctrl.cmd_valid && !dut.u_ctrl.cmd_ready) mech[M_STALL]++;
    if (out_valid && !out_ready) mech[M_OUTBP]++;
  end
  // gated clocks must not tick while disabled
  int fe_edges = 0, clk_edges = 0;
  always @(posedge dut.fe_clk) fe_edges++;
  always @(posedge clk) clk_edges++;

  // result FIFO: random backpressure
  always @(negedge clk) out_ready <= rst_n && ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (out_valid && out_ready) rq.push_back(out_data);

  task automatic send(logic [3:0] op, logic [23:0] addr, logic [35:0] data);
    @(negedge clk); in_valid = 1; in_data = {op, addr, data};
    while (!in_ready) @(negedge clk);
    @(posedge clk); #1 in_valid = 0;
  endtask
  task automatic get(output logic [63:0] w);
    int t;
    t = 0;
    while (rq.size() == 0 && t < 50000) begin @(negedge clk); t++; end
    if (rq.size() == 0) begin failures++; $display("FAIL no result"); w = '0; end
    else w = rq.pop_front();
  endtask
  task automatic write_cfg();
    cfgv = '0;
    cfgv[$bits(conv_cfg_t)-1:0] = ccfg;
    cfgv[64 +: $bits(afu_cfg_t)] = acfg;
    cfgv[160 +: $bits(hdc_cfg_t)] = hcfg;
    for (int i = 0; i < 8; i++) send(OP_WR_CFG, 24'(i), 36'(cfgv[32*i +: 32]));
  endtask

  function automatic int sat(int v, int pl);
    int w, hi, lo;
    if (pl == 0) return (v < 0) ? -1 : 1;
    w = 1 << pl; hi = (1 << (w - 1)) - 1; lo = -(1 << (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  function automatic void encode(int pl, output int q [ND]);
    logic [15:0] l [16];
    for (int i = 0; i < NF; i++) fbuf[i] = int'(dut.u_hdc.u_fb.mem[i]);
    for (int i = 0; i < 16; i++) l[i] = (seeds[i] == 0) ? 16'h1 : seeds[i];
    for (int d = 0; d < ND / 16; d++) begin
      for (int i = 0; i < 16; i++) begin
        int acc;
        acc = 0;
        for (int j = 0; j < 16; j++) acc += l[i][j] ? fbuf[j] : -fbuf[j];
        q[d*16+i] = sat(acc, pl);
        l[i] = lfsr16_adv(l[i]);
      end
    end
  endfunction

  task automatic train(int c, bit nw, int pl);
    int q [ND];
    logic [63:0] w;
    send(OP_TRAIN, 24'(c), 36'(nw));
    get(w);
    encode(pl, q);
    for (int i = 0; i < ND; i++) chv[c][i] = sat((nw ? 0 : chv[c][i]) + q[i], pl);
    checks++;
    if (w[63:60] != 4'h9) begin failures++; $display("FAIL train result %h", w); end
    if (nw) mech[M_NEW]++; else mech[M_INCR]++;
  endtask

  task automatic infer(int b, int pl, inout int run, inout int prev, output bit ex);
    int q [ND];
    int best, bd;
    logic [63:0] w;
    send(OP_INFER, 24'(b), 36'd0);
    get(w);
    encode(pl, q);
    best = 0; bd = 32'h7fffffff;
    for (int j = 0; j < NC; j++) begin
      int s;
      s = 0;
      for (int i = 0; i < ND; i++) s += (q[i] > chv[(b-1)*NC+j][i]) ? q[i] - chv[(b-1)*NC+j][i] : chv[(b-1)*NC+j][i] - q[i];
      if (s < bd) begin bd = s; best = j; end
    end
    if (b < int'(hcfg.es)) run = 0;
    else if (b == int'(hcfg.es) || best != prev) run = 1;
    else run++;
    prev = best;
    ex = (run != 0 && run >= int'(hcfg.ec)) || b >= int'(hcfg.nblk);
    checks++;
    if (w[63:60] != 4'hA || int'(w[39:32]) != best || int'(w[31:0]) != bd || int'(w[42:40]) != b || w[43] != ex) begin
      failures++; $display("FAIL infer p%0d b%0d: %h, want pred %0d dist %0d exit %0d", pl, b, w, best, bd, ex);
    end
    mech[M_INFER]++;
    if (ex && b < int'(hcfg.nblk)) mech[M_EXIT]++;
  endtask

  task automatic fe_features(int shots);
    send(OP_CLR_FEAT, 0, 0);
    for (int s = 0; s < shots; s++) begin
      send(OP_RUN_FE, 0, 0);
      send(OP_POOL, 0, 0);
    end
    if (shots > 1) mech[M_BATCH]++;
  endtask

  initial begin
    in_valid = 0; in_data = 0;
    ccfg = '0; ccfg.w_in = WI; ccfg.gs = GS; ccfg.ngrp = NG; ccfg.pitch = WI * CI; ccfg.cin = CI;
    acfg = '0; acfg.opitch = 13'(WO * 16); acfg.cout = 16; acfg.wb_en = 1; acfg.pool_en = 1;
    acfg.pscale = 16'h3E00; acfg.npool = 16;   // 1/8
    hcfg = '{nfseg: 7'd1, nseg: 10'd16, plog: 3'd4, shift: 5'd0, ncls: 8'(NC), es: 3'd1, ec: 3'd2, nblk: 3'd3};
    for (int y = 0; y < 6; y++) for (int x = 0; x < WI; x++) for (int c = 0; c < CI; c++)
      A[y][x][c] = real_to_bf16(real'($urandom_range(0, 15)) / 8.0);
    for (int k = 0; k < 16; k++) begin
      for (int c = 0; c < CI; c++) IX[k][c] = kidx_t'({$urandom, $urandom});
      for (int g = 0; g < NG; g++) for (int n = 0; n < 16; n++)
        CB[k][g][n] = real_to_bf16((real'($urandom_range(0, 40)) - 16.0) / 16.0);
    end
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      outv[x][r][k] = 0.0; outm[x][r][k] = 0.0;
      for (int c = 0; c < CI; c++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        real p;
        p = bf16_to_real(A[r+ky][x+kx][c]) * bf16_to_real(CB[k][c / GS][IX[k][c][4*(3*ky+kx) +: 4]]);
        outv[x][r][k] += p; outm[x][r][k] += (p < 0) ? -p : p;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;

    write_cfg();
    for (int i = 0; i < 16; i++) begin
      seeds[i] = 16'($urandom);
      send(OP_WR_CFG, 24'(16 + i), 36'(seeds[i]));
    end
    for (int y = 0; y < 6; y++) for (int x = 0; x < WI; x++) for (int c = 0; c < CI; c++)
      send(OP_WR_ACT, {9'd0, 2'(y % 4), 13'((y / 4) * WI * CI + x * CI + c)}, 36'(A[y][x][c]));
    send(OP_SWAP, 0, 0);
    for (int k = 0; k < 16; k++) begin
      for (int c = 0; c < CI; c++) send(OP_WR_IDX, {11'd0, 4'(k), 9'(c)}, 36'(IX[k][c]));
      for (int g = 0; g < NG; g++) for (int n = 0; n < 16; n++)
        send(OP_WR_WGT, {13'd0, 4'(k), 7'(g * 16 + n)}, 36'(CB[k][g][n]));
    end

    // one conv pass; rewriting the codebooks behind it stalls and fills the
    // input FIFO; then read every output back
    send(OP_RUN_FE, 0, 0);
    for (int n = 0; n < 32; n++) send(OP_WR_WGT, {13'd0, 4'(n % 16), 7'(n / 16)}, 36'(CB[n % 16][0][n / 16]));
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      logic [63:0] w;
      send(OP_RD_OUT, {12'd0, 6'(x), 2'(r), 4'(k)}, 0);
      get(w);
      checks++;
      if (w[63:60] != 4'hC || !close_mag(bf16_to_real(w[15:0]), outv[x][r][k], outm[x][r][k], 0.04)) begin
        failures++; $display("FAIL out x%0d r%0d k%0d: %h vs %f", x, r, k, w, outv[x][r][k]);
      end
    end
    // write-back landed in the other half (bank y%4 of the fill half)
    for (int x = 0; x < WO; x++) for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) begin
      real e;
      e = (outv[x][r][k] > 0.0) ? outv[x][r][k] : 0.0;
      checks++;
      if (!close_mag(bf16_to_real(dut.u_fe.u_act.mem[{~dut.u_fe.u_act.rd_half, 2'(r)}][x * 16 + k]), e, outm[x][r][k], 0.04)) begin
        failures++; $display("FAIL write-back x%0d r%0d k%0d", x, r, k);
      end
    end

    for (int pl = 4; pl >= 0; pl -= 4) begin
      int run, prev;
      bit ex;
      logic [7:0] raw [NF];
      int f1 [NF];
      hcfg.plog = 3'(pl);
      write_cfg();
      mech[pl == 4 ? M_P16 : M_P1]++;
      for (int i = 0; i < NF; i++) raw[i] = 8'($urandom_range(0, 30));
      fe_features(1);
      send(OP_WR_CFG, 24'd16, 36'(seeds[0]));         // waits for pooling to end
      while (dut.u_in_fifo.count != 0) @(negedge clk);
      repeat (2) @(negedge clk);
      for (int i = 0; i < NF; i++) f1[i] = int'(dut.u_hdc.u_fb.mem[i]);
      for (int b = 0; b < 2; b++) begin
        fe_features(2);
        train(b * NC, 1'b1, pl);
        // the two pooled shots were summed in the feature buffer
        for (int i = 0; i < NF; i++) begin
          checks++;
          if (fbuf[i] != ((2 * f1[i] > 255) ? 255 : 2 * f1[i])) begin
            failures++; $display("FAIL batched feature %0d: %0d vs 2 x %0d", i, fbuf[i], f1[i]);
          end
        end
        send(OP_CLR_FEAT, 0, 0);
        for (int i = 0; i < NF; i++) send(OP_WR_FEAT, 24'(i), 36'(raw[i]));
        mech[M_BYPASS]++;
        train(b * NC + 1, 1'b1, pl);
        for (int i = 0; i < NF; i++) send(OP_WR_FEAT, 24'(i), 36'(raw[i] + 8'($urandom_range(0, 3))));
        train(b * NC + 1, 1'b0, pl);
      end
      fe_features(1);
      run = 0; prev = -1;
      for (int b = 1; b <= 3; b++) begin
        infer(b, pl, run, prev, ex);
        if (ex) break;
      end
    end

    repeat (20) @(negedge clk);
    checks++;
    if (fe_edges >= clk_edges || fe_edges == 0) begin failures++; $display("FAIL fe clock edges %0d of %0d", fe_edges, clk_edges); end
    for (int m = 0; m < int'(M_NMECH); m++) begin
      $display("mechanism %-22s %0d", mname[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism %s never happened", mname[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
