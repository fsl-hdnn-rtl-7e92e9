// tb_hdc_classifier: end-to-end test of the HDC classifier against a
// bit-exact software model (LFSR projection matrix, cRP encoding,
// saturating class update, L1 distance, min search, early exit).
// Configuration: F = 32 features (2 segments), D = 256 (16 segments),
// 3 classes per CONV block, 2 trained blocks, E_s = 1, E_c = 2, 3 blocks.
// The scenario runs at 16-bit and at 1-bit class precision. Per block and
// class it trains one batched shot (two samples accumulated in the feature
// buffer, new class) and one incremental shot, then infers a noisy copy of
// class 1 at blocks 1 and 2; the second block repeats the prediction, so
// the early exit must fire before the last block. Latencies are checked:
// training takes nseg*(nfseg+4) cycles from start to done, inference
// nseg*(nfseg+ncls+2)+ncls+3 cycles, of which (D*F)/256 are encoding.
`timescale 1ns/1ps
module tb_hdc_classifier;
  import fsl_pkg::*;
  import tb_bf16_pkg::*;
  localparam int NF = 32, ND = 256, NC = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  hdc_cfg_t cfg;
  logic fw_en, fw_acc, feat_clear, seed_wr, train_start, train_new, infer_start;
  logic [9:0] fw_idx;
  logic [7:0] fw_data, train_cls, res_pred;
  logic [3:0] seed_idx;
  logic [15:0] seed_data;
  logic [2:0] infer_blk, res_blk;
  logic busy, done, res_valid, res_exit;
  logic [31:0] res_dist;
  hdc_classifier dut (.*);

  int checks = 0, failures = 0, n_enc = 0, n_exit = 0;
  logic [15:0] seeds [16];
  int fbuf [NF];
  int chv [8][ND];
  int proto [2][NC][NF];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (dut.enc_v) n_enc++;

  function automatic int sat(int v, int pl);
    int w, hi, lo;
    if (pl == 0) return (v < 0) ? -1 : 1;
    w = 1 << pl; hi = (1 << (w - 1)) - 1; lo = -(1 << (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  // projection of the buffer: block k = d*nfseg + f comes from the LFSRs
  // advanced k times from the seeds
  function automatic void encode(int pl, output int q [ND]);
    logic [15:0] l [16];
    for (int i = 0; i < 16; i++) l[i] = (seeds[i] == 0) ? 16'h1 : seeds[i];
    for (int d = 0; d < ND / 16; d++) begin
      int acc [16];
      for (int i = 0; i < 16; i++) acc[i] = 0;
      for (int f = 0; f < NF / 16; f++) begin
        for (int i = 0; i < 16; i++)
          for (int j = 0; j < 16; j++)
            acc[i] += l[i][j] ? fbuf[f*16+j] : -fbuf[f*16+j];
        for (int i = 0; i < 16; i++) l[i] = lfsr16_adv(l[i]);
      end
      for (int i = 0; i < 16; i++) q[d*16+i] = sat(acc[i], pl);
    end
  endfunction

  task automatic load_feat(int p [NF], bit acc);
    for (int i = 0; i < NF; i++) begin
      int v;
      v = p[i] + int'($urandom_range(0, 12));
      @(negedge clk); fw_en = 1; fw_acc = acc; fw_idx = 10'(i); fw_data = 8'(v);
      fbuf[i] = acc ? ((fbuf[i] + v > 255) ? 255 : fbuf[i] + v) : v;
    end
    @(negedge clk); fw_en = 0;
  endtask

  task automatic train(int c, bit nw, int pl);
    int q [ND];
    int t0, cyc;
    encode(pl, q);
    for (int i = 0; i < ND; i++) chv[c][i] = sat((nw ? 0 : chv[c][i]) + q[i], pl);
    @(negedge clk); train_start = 1; train_cls = 8'(c); train_new = nw; n_enc = 0;
    cyc = 0;
    @(negedge clk); train_start = 0;
    do begin @(negedge clk); cyc++; end while (!done);
    checks++;
    if (cyc != 16 * (2 + 4)) begin failures++; $display("FAIL train cycles %0d", cyc); end
    checks++;
    if (n_enc != ND * NF / 256) begin failures++; $display("FAIL train encode cycles %0d", n_enc); end
  endtask

  task automatic infer(int b, int pl, inout int run, inout int prev, output bit ex);
    int q [ND];
    int best, bd, cyc;
    encode(pl, q);
    best = 0; bd = 32'h7fffffff;
    for (int j = 0; j < NC; j++) begin
      int s;
      s = 0;
      for (int i = 0; i < ND; i++) s += (q[i] > chv[(b-1)*NC+j][i]) ? q[i] - chv[(b-1)*NC+j][i] : chv[(b-1)*NC+j][i] - q[i];
      if (s < bd) begin bd = s; best = j; end
    end
    if (b < int'(cfg.es)) run = 0;
    else if (b == int'(cfg.es) || best != prev) run = 1;
    else run++;
    prev = best;
    ex = (run != 0 && run >= int'(cfg.ec)) || b >= int'(cfg.nblk);
    @(negedge clk); infer_start = 1; infer_blk = 3'(b); n_enc = 0;
    cyc = 0;
    @(negedge clk); infer_start = 0;
    do begin @(negedge clk); cyc++; end while (!res_valid);
    checks++;
    if (cyc != 16 * (2 + NC + 2) + NC + 3) begin failures++; $display("FAIL infer cycles %0d", cyc); end
    checks++;
    if (n_enc != ND * NF / 256) begin failures++; $display("FAIL infer encode cycles %0d", n_enc); end
    checks++;
    if (int'(res_pred) != best || int'(res_dist) != bd || int'(res_blk) != b || res_exit != ex) begin
      failures++;
      $display("FAIL infer p%0d b%0d: pred %0d/%0d dist %0d/%0d exit %0d/%0d", pl, b, res_pred, best, res_dist, bd, res_exit, ex);
    end
    checks++;
    if (dut.u_dt.tbl[128 + 2*(b-1)] != 32'(best) || dut.u_dt.tbl[129 + 2*(b-1)] != 32'(bd)) begin
      failures++; $display("FAIL block record b%0d", b);
    end
  endtask

  initial begin
    {fw_en, fw_acc, feat_clear, seed_wr, train_start, train_new, infer_start} = '0;
    fw_idx = 0; fw_data = 0; train_cls = 0; seed_idx = 0; seed_data = 0; infer_blk = 0;
    cfg = '{nfseg: 7'd2, nseg: 10'd16, plog: 3'd4, shift: 5'd0, ncls: 8'(NC), es: 3'd1, ec: 3'd2, nblk: 3'd3};
    for (int i = 0; i < NF; i++) fbuf[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      seeds[i] = 16'($urandom);
      @(negedge clk); seed_wr = 1; seed_idx = 4'(i); seed_data = seeds[i];
    end
    @(negedge clk); seed_wr = 0;
    for (int b = 0; b < 2; b++)
      for (int c = 0; c < NC; c++)
        for (int i = 0; i < NF; i++) proto[b][c][i] = $urandom_range(0, 100);
    foreach (proto[b, c]) if (b == 1) proto[1][c] = proto[0][c];
    for (int pl = 4; pl >= 0; pl -= 4) begin
      int run, prev;
      bit ex;
      cfg.plog = 3'(pl);
      for (int b = 0; b < 2; b++)
        for (int c = 0; c < NC; c++) begin
          @(negedge clk); feat_clear = 1; @(negedge clk); feat_clear = 0;
          for (int i = 0; i < NF; i++) fbuf[i] = 0;
          load_feat(proto[b][c], 1'b1);                 // batched: two shots
          load_feat(proto[b][c], 1'b1);
          train(b*NC + c, 1'b1, pl);
          load_feat(proto[b][c], 1'b0);                 // incremental shot
          train(b*NC + c, 1'b0, pl);
        end
      run = 0; prev = -1;
      load_feat(proto[0][1], 1'b0);
      for (int b = 1; b <= 3; b++) begin
        infer(b, pl, run, prev, ex);
        if (ex) begin
          if (b < int'(cfg.nblk)) n_exit++;
          break;
        end
      end
    end
    checks++;
    if (n_exit == 0) begin failures++; $display("FAIL early exit never happened"); end
    $display("early exits: %0d", n_exit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
