// fsl_hdnn_top: few-shot on-device learning accelerator, chip top level.
//
// A frozen CNN feature extractor with clustered weights (feature_extractor)
// feeds a hyperdimensional-computing classifier (hdc_classifier) that learns
// new classes in a single pass. The host talks to the chip only through two
// 64-bit FIFOs (commands in, results out); chip_ctrl decodes the commands,
// and two clock gates stop the FE and HDC clocks whenever those units have
// nothing to do. Features reach the classifier either from the FE's
// pooling unit (accumulated, for batched training and for the per-block
// early-exit features) or directly from the host as raw input.
//
// Off-chip parts (pads, clock source, host, DRAM) are outside this module;
// its ports are the FIFO handshakes and a scan-style clock-gate override.
// The partition into FE and HDC units, the 64-bit FIFO link and the clock
// gating follow the published chip; the command protocol and the feature
// multiplexing are this design's. At most one command leaves the FIFO head
// per cycle; results leave through the output FIFO in command order.
// Lint notes: the FIFO levels and the active buffer half are internal status
// that is not brought to pins.
module fsl_hdnn_top
  import fsl_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        test_en,       // forces the gated clocks on
  // host -> chip command words
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  // chip -> host result words
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data,
  // status
  output logic        fe_busy,
  output logic        hdc_busy
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  logic        cmd_valid, cmd_ready, res_push, res_space;
  logic [63:0] cmd_data, res_data;
  logic [CW-1:0] cmd_count, res_count;
  conv_cfg_t   conv_cfg;
  afu_cfg_t    afu_cfg;
  hdc_cfg_t    hdc_cfg;

  logic        act_wr_en, act_swap, act_rd_half, idx_wr_en, wgt_wr_en;
  logic [1:0]  act_wr_bank;
  logic [12:0] act_wr_addr;
  bf16_t       act_wr_data, wgt_wr_data, fe_hrd_data;
  logic [3:0]  idx_wr_bank, wgt_wr_bank, fe_hrd_ch;
  logic [8:0]  idx_wr_addr;
  kidx_t       idx_wr_data;
  logic [6:0]  wgt_wr_addr;
  logic        fe_run, fe_pool, fe_pool_clear, fe_hrd_en, fe_pass_done;
  logic [5:0]  fe_hrd_col;
  logic [1:0]  fe_hrd_row;
  logic        afu_fw_en, hfw_en, feat_clear, seed_wr, train_start, train_new, infer_start;
  logic [9:0]  afu_fw_idx, hfw_idx;
  logic [7:0]  afu_fw_data, hfw_data, train_cls, res_pred;
  logic [3:0]  seed_idx;
  logic [15:0] seed_data;
  logic [2:0]  infer_blk, res_blk;
  logic        hdc_done, res_valid, res_exit;
  logic [31:0] res_dist;
  logic        fe_clk_en, hdc_clk_en, fe_clk, hdc_clk;

  io_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(cmd_valid), .out_ready(cmd_ready), .out_data(cmd_data), .count(cmd_count));

  io_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .in_valid(res_push), .in_ready(res_space), .in_data(res_data),
    .out_valid, .out_ready, .out_data, .count(res_count));

  chip_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data, .res_push, .res_space, .res_data,
    .conv_cfg, .afu_cfg, .hdc_cfg,
    .act_wr_en, .act_wr_bank, .act_wr_addr, .act_wr_data, .act_swap,
    .idx_wr_en, .idx_wr_bank, .idx_wr_addr, .idx_wr_data,
    .wgt_wr_en, .wgt_wr_bank, .wgt_wr_addr, .wgt_wr_data,
    .fe_run, .fe_pool, .fe_pool_clear, .fe_hrd_en, .fe_hrd_col, .fe_hrd_row, .fe_hrd_ch, .fe_hrd_data,
    .fe_busy, .fe_pulse(fe_pass_done || afu_fw_en),
    .hfw_en, .hfw_idx, .hfw_data, .feat_clear, .seed_wr, .seed_idx, .seed_data,
    .train_start, .train_cls, .train_new, .infer_start, .infer_blk,
    .hdc_busy, .hdc_pulse(hdc_done || res_valid), .hdc_done, .res_valid, .res_pred, .res_dist, .res_blk, .res_exit,
    .fe_clk_en, .hdc_clk_en);

  // pooled FE features must reach the classifier's (gated) clock domain
  clk_gate u_cg_fe  (.clk, .en(fe_clk_en),               .test_en, .gclk(fe_clk));
  clk_gate u_cg_hdc (.clk, .en(hdc_clk_en || afu_fw_en), .test_en, .gclk(hdc_clk));

  feature_extractor u_fe (
    .clk(fe_clk), .rst_n, .conv_cfg, .afu_cfg,
    .act_wr_en, .act_wr_bank, .act_wr_addr, .act_wr_data, .act_swap, .act_rd_half,
    .idx_wr_en, .idx_wr_bank, .idx_wr_addr, .idx_wr_data,
    .wgt_wr_en, .wgt_wr_bank, .wgt_wr_addr, .wgt_wr_data,
    .run(fe_run), .pool_start(fe_pool), .pool_clear(fe_pool_clear), .busy(fe_busy), .pass_done(fe_pass_done),
    .hrd_en(fe_hrd_en), .hrd_col(fe_hrd_col), .hrd_row(fe_hrd_row), .hrd_ch(fe_hrd_ch), .hrd_data(fe_hrd_data),
    .fw_en(afu_fw_en), .fw_idx(afu_fw_idx), .fw_data(afu_fw_data));

  // feature source: FE pooling unit (accumulate) or raw host input (overwrite)
  hdc_classifier u_hdc (
    .clk(hdc_clk), .rst_n, .cfg(hdc_cfg),
    .fw_en(afu_fw_en || hfw_en), .fw_acc(afu_fw_en),
    .fw_idx(afu_fw_en ? afu_fw_idx : hfw_idx), .fw_data(afu_fw_en ? afu_fw_data : hfw_data),
    .feat_clear, .seed_wr, .seed_idx, .seed_data,
    .train_start, .train_cls, .train_new, .infer_start, .infer_blk,
    .busy(hdc_busy), .done(hdc_done),
    .res_valid, .res_pred, .res_dist, .res_blk, .res_exit);
endmodule
