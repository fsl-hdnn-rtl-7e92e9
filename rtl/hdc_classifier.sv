// hdc_classifier: hyperdimensional-computing few-shot classifier.
//
// Blocks: feature buffer, cRP encoder (PRNG with base memory, binary
// multiplier, 16 adder trees, segment accumulators), training module (HV
// updater, HV register), class-HV memory with padding unit, and inference
// module (distance calculator, distance table, min finder, early-exit check),
// run by the sequencer below.
//
// Both operations walk the D/16 segments of the hypervector. For segment d
// the encoder first needs F/16 cycles: in each it reads one 16-feature
// segment and takes the next 16x16 block from the PRNG (which is reloaded
// from its base memory at the start of every operation, so training and
// inference see the same projection matrix). In total an encoding takes
// (D*F)/256 block cycles. Then:
//  * TRAIN (class cls, "new" = first sample of that class): the class segment
//    is read, the updater adds the encoded segment (or starts from 0), and the
//    sum is written back: nseg*(nfseg+4) cycles from start to done.
//  * INFER (CONV block blk = 1..nblk): the encoded segment is compared with
//    segment d of the ncls classes of that block (class ids
//    (blk-1)*ncls + j), one class per cycle, the L1 distances accumulating in
//    the distance table. Then the table is scanned by the min finder, the
//    block's (prediction, distance) is stored at entries 128+2(blk-1) and
//    129+2(blk-1), and the early-exit check decides whether to stop.
//    Latency nseg*(nfseg+ncls+2)+ncls+3 cycles from start to result.
// Batched training is obtained by accumulating the K pooled features of one
// class in the feature buffer and training once. The sequential
// encode-then-compare schedule is this design's; the published text gives
// the blocks and the cycle count of encoding, not their overlap.
module hdc_classifier
  import fsl_pkg::*;
#(
  parameter int unsigned FMAX  = 1024,
  parameter int unsigned DEPTH = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  hdc_cfg_t    cfg,
  // feature buffer writes (AFU: accumulate; host raw input: overwrite)
  input  logic        fw_en,
  input  logic        fw_acc,
  input  logic [9:0]  fw_idx,
  input  logic [7:0]  fw_data,
  input  logic        feat_clear,
  // PRNG seed (base memory) writes
  input  logic        seed_wr,
  input  logic [3:0]  seed_idx,
  input  logic [15:0] seed_data,
  // operations
  input  logic        train_start,
  input  logic [7:0]  train_cls,
  input  logic        train_new,
  input  logic        infer_start,
  input  logic [2:0]  infer_blk,
  output logic        busy,
  output logic        done,
  output logic        res_valid,    // inference result
  output logic [7:0]  res_pred,
  output logic [31:0] res_dist,
  output logic [2:0]  res_blk,
  output logic        res_exit
);
  typedef enum logic [3:0] {
    S_IDLE, S_ENC, S_ENCW, S_URD, S_UADD, S_UWR, S_IRD, S_IRW, S_MIN, S_MINW, S_EE, S_RES
  } state_t;
  state_t state;

  logic        is_train, is_new;
  logic [7:0]  cls;
  logic [2:0]  blk;
  logic [6:0]  f;
  logic [9:0]  d;
  logic [7:0]  j, jq;
  logic        enc_v, enc_first, rd_v;
  logic [7:0]  cls_base;

  // feature buffer
  logic [7:0]  fb_data [SEG];
  logic        fb_rd_en;
  feature_buf #(.FMAX(FMAX)) u_fb (
    .clk, .rst_n, .clear(feat_clear), .wr_en(fw_en), .wr_acc(fw_acc), .wr_idx(fw_idx[$clog2(FMAX)-1:0]),
    .wr_data(fw_data), .rd_en(fb_rd_en), .rd_seg(f[$clog2(FMAX/SEG)-1:0]), .rd_data(fb_data));

  // cRP encoder
  logic [15:0] block [SEG];
  logic signed [23:0] enc_acc [SEG];
  hv_elem_t    hv [SEG];
  crp_prng u_prng (
    .clk, .rst_n, .seed_wr, .seed_idx, .seed_data,
    .load((train_start || infer_start) && state == S_IDLE), .step(enc_v), .block);
  crp_encoder u_enc (
    .clk, .rst_n, .en(enc_v), .first(enc_first), .feat(fb_data), .block,
    .plog(cfg.plog), .shift(cfg.shift), .acc(enc_acc), .hv);

  // class memory
  logic        cm_rd_en, cm_wr_en;
  logic [7:0]  cm_rd_cls;
  hv_elem_t    cm_rd_data [SEG];
  hv_elem_t    upd_data   [SEG];
  class_mem #(.DEPTH(DEPTH)) u_cm (
    .clk, .plog(cfg.plog), .nseg(cfg.nseg),
    .rd_en(cm_rd_en), .rd_cls(cm_rd_cls), .rd_seg(d), .rd_data(cm_rd_data),
    .wr_en(cm_wr_en), .wr_cls(cls), .wr_seg(d), .wr_data(upd_data));

  // training module
  hv_updater u_upd (
    .clk, .en(state == S_UADD), .zero(is_new), .plog(cfg.plog),
    .cls_data(cm_rd_data), .enc_data(hv), .upd_data);

  // inference module
  logic [20:0] seg_dist;
  logic [31:0] tbl_rd;
  logic [7:0]  min_id;
  logic [31:0] min_dist;
  logic        tbl_wr;
  logic [7:0]  tbl_wr_addr;
  logic [31:0] tbl_wr_data;
  logic        ee_exit;
  logic [2:0]  ee_len;
  dist_calc u_dc (.q(hv), .c(cm_rd_data), .seg_dist);
  dist_table u_dt (
    .clk, .rst_n, .clear(infer_start && state == S_IDLE),
    .acc_en(rd_v && !is_train), .acc_addr(jq), .acc_val(32'(seg_dist)),
    .wr_en(tbl_wr), .wr_addr(tbl_wr_addr), .wr_data(tbl_wr_data),
    .rd_addr(j), .rd_data(tbl_rd));
  min_finder u_mf (
    .clk, .rst_n, .start(state == S_IRW), .valid(state == S_MIN), .id(j), .dist_in(tbl_rd),
    .min_id, .min_dist);
  ee_check u_ee (
    .clk, .rst_n, .valid(state == S_EE), .blk, .pred(min_id), .es(cfg.es), .ec(cfg.ec),
    .nblk(cfg.nblk), .exit_now(ee_exit), .run_len(ee_len));

  assign cls_base  = 8'(32'(blk - 3'd1) * 32'(cfg.ncls));
  assign fb_rd_en  = (state == S_ENC);
  assign cm_rd_en  = (state == S_URD) || (state == S_IRD);
  assign cm_rd_cls = is_train ? cls : cls_base + j;
  assign cm_wr_en  = (state == S_UWR);

  always_comb begin
    // block record: prediction (S_EE), then its distance (S_RES)
    tbl_wr      = (state == S_EE) || (state == S_RES);
    tbl_wr_addr = 8'd128 + {4'd0, blk - 3'd1, state == S_RES};
    tbl_wr_data = (state == S_RES) ? min_dist : 32'(min_id);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {is_train, is_new, cls, blk, f, d, j, jq, enc_v, enc_first, rd_v} <= '0;
      {done, res_valid, res_pred, res_dist, res_blk, res_exit} <= '0;
    end else begin
      done      <= 1'b0;
      res_valid <= 1'b0;
      enc_v     <= (state == S_ENC);
      enc_first <= (state == S_ENC) && (f == 7'd0);
      rd_v      <= (state == S_IRD);
      jq        <= j;
      unique case (state)
        S_IDLE: begin
          f <= '0; d <= '0; j <= '0;
          if (train_start) begin
            state <= S_ENC; is_train <= 1'b1; is_new <= train_new; cls <= train_cls;
          end else if (infer_start) begin
            state <= S_ENC; is_train <= 1'b0; blk <= infer_blk;
          end
        end
        S_ENC: begin
          f <= f + 7'd1;
          if (f == cfg.nfseg - 7'd1) begin state <= S_ENCW; f <= '0; end
        end
        S_ENCW: begin
          state <= is_train ? S_URD : S_IRD;
          j <= '0;
        end
        S_URD:  state <= S_UADD;
        S_UADD: state <= S_UWR;
        S_UWR: begin
          d <= d + 10'd1;
          if (d == cfg.nseg - 10'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_ENC;
        end
        S_IRD: begin
          j <= j + 8'd1;
          if (j == cfg.ncls - 8'd1) state <= S_IRW;
        end
        S_IRW: begin
          j <= '0;
          if (d == cfg.nseg - 10'd1) state <= S_MIN;
          else begin d <= d + 10'd1; state <= S_ENC; end
        end
        S_MIN: begin
          j <= j + 8'd1;
          if (j == cfg.ncls - 8'd1) state <= S_MINW;
        end
        S_MINW: state <= S_EE;
        S_EE: begin
          res_pred <= min_id;
          res_dist <= min_dist;
          state    <= S_RES;
        end
        S_RES: begin
          res_valid <= 1'b1;
          res_blk   <= blk;
          res_exit  <= ee_exit;
          done      <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
