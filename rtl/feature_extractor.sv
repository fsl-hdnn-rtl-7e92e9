// feature_extractor: weight-clustering CNN feature extractor.
//
// Holds the 128 KB double-buffered activation memory, the 36 KB index and
// 4 KB codebook memories, the 4x16 PE array, the output buffer, the
// auxiliary function unit (AFU) and the sequencer. A "run" executes one conv
// pass (fe_ctrl) and then automatically drains the pass through the AFU
// (ReLU, write-back to the fill half, pooling). "pool_start" moves pooled,
// 4-bit quantised features to the HDC feature buffer through the fw_* port.
// Host-side writes to the activation memory are accepted while the unit is
// idle; while it is busy the AFU owns that write port. The output buffer can
// be read by the host while idle (hrd_*, data one cycle later).
// The set of units and memory sizes follow the published architecture; the
// automatic drain after every pass and the host/AFU port sharing are this
// design's choices. Timing: a pass, then wout*64+2 drain cycles, with busy
// high throughout.
module feature_extractor
  import fsl_pkg::*;
#(
  parameter int unsigned WMAX = 64,
  parameter int unsigned CMAX = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  conv_cfg_t   conv_cfg,
  input  afu_cfg_t    afu_cfg,
  // host memory writes
  input  logic        act_wr_en,
  input  logic [1:0]  act_wr_bank,
  input  logic [12:0] act_wr_addr,
  input  bf16_t       act_wr_data,
  input  logic        act_swap,
  output logic        act_rd_half,     // activation half read by the PEs
  input  logic        idx_wr_en,
  input  logic [3:0]  idx_wr_bank,
  input  logic [8:0]  idx_wr_addr,
  input  kidx_t       idx_wr_data,
  input  logic        wgt_wr_en,
  input  logic [3:0]  wgt_wr_bank,
  input  logic [6:0]  wgt_wr_addr,
  input  bf16_t       wgt_wr_data,
  // commands
  input  logic        run,
  input  logic        pool_start,
  input  logic        pool_clear,
  output logic        busy,
  output logic        pass_done,
  // host read of the output buffer
  input  logic        hrd_en,
  input  logic [5:0]  hrd_col,
  input  logic [1:0]  hrd_row,
  input  logic [3:0]  hrd_ch,
  output bf16_t       hrd_data,
  // pooled features to the HDC classifier
  output logic        fw_en,
  output logic [9:0]  fw_idx,
  output logic [7:0]  fw_data
);
  localparam int unsigned XW = $clog2(WMAX);

  // activation memory
  logic        am_rd_en, am_wr_en;
  logic [12:0] am_rd_addr [4];
  bf16_t       am_rd_data [4];
  logic [1:0]  am_wr_bank;
  logic [12:0] am_wr_addr;
  bf16_t       am_wr_data;
  // index / codebook memories
  logic        im_rd_en, wm_rd_en;
  logic [8:0]  im_rd_addr;
  logic [6:0]  wm_rd_addr;
  kidx_t       kidx [16];
  bf16_t       wcb  [16];
  // PE array
  bf16_t       pe_act [4];
  bf16_t       pe_out [4][16];
  logic        pe_acc_en, pe_mac_en, pe_mac_last, pe_out_valid;
  logic [1:0]  pe_ky, pe_phase;
  logic [IDX_W-1:0] pe_mac_addr;
  // output buffer
  logic        ob_wr_en, ob_wr_acc, ob_rd_en;
  logic [5:0]  ob_wr_col;
  logic [XW-1:0] ob_rd_col, afu_rd_col;
  logic [1:0]  ob_rd_row, afu_rd_row;
  logic [3:0]  ob_rd_ch, afu_rd_ch;
  logic        afu_rd_en;
  bf16_t       ob_rd_data;
  // AFU
  logic        aw_en;
  logic [1:0]  aw_bank;
  logic [12:0] aw_addr;
  bf16_t       aw_data;
  logic        ctrl_busy, afu_busy;

  act_mem u_act (
    .clk, .rst_n, .swap(act_swap), .rd_half(act_rd_half),
    .wr_en(am_wr_en), .wr_bank(am_wr_bank), .wr_addr(am_wr_addr), .wr_data(am_wr_data),
    .rd_en(am_rd_en), .rd_addr(am_rd_addr), .rd_data(am_rd_data));

  idx_mem u_idx (
    .clk, .wr_en(idx_wr_en), .wr_bank(idx_wr_bank), .wr_addr(idx_wr_addr), .wr_data(idx_wr_data),
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(kidx));

  wgt_mem u_wgt (
    .clk, .wr_en(wgt_wr_en), .wr_bank(wgt_wr_bank), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
    .rd_en(wm_rd_en), .rd_addr(wm_rd_addr), .rd_data(wcb));

  fe_ctrl u_ctrl (
    .clk, .rst_n, .start(run && !busy), .cfg(conv_cfg), .busy(ctrl_busy), .done(pass_done),
    .am_rd_en, .am_rd_addr, .am_rd_data,
    .im_rd_en, .im_rd_addr, .wm_rd_en, .wm_rd_addr,
    .pe_act, .pe_acc_en, .pe_ky, .pe_phase, .pe_mac_en, .pe_mac_addr, .pe_mac_last,
    .pe_out_valid, .ob_wr_en, .ob_wr_acc, .ob_wr_col);

  fe_pe_array u_pes (
    .clk, .rst_n, .acc_en(pe_acc_en), .act(pe_act), .kidx, .ky(pe_ky), .phase(pe_phase),
    .mac_en(pe_mac_en), .mac_addr(pe_mac_addr), .mac_last(pe_mac_last), .w(wcb),
    .out_valid(pe_out_valid), .out_data(pe_out));

  out_buf #(.WMAX(WMAX)) u_ob (
    .clk, .wr_en(ob_wr_en), .wr_acc(ob_wr_acc), .wr_col(XW'(ob_wr_col)), .wr_data(pe_out),
    .rd_en(ob_rd_en), .rd_col(ob_rd_col), .rd_row(ob_rd_row), .rd_ch(ob_rd_ch), .rd_data(ob_rd_data));

  afu #(.CMAX(CMAX), .WMAX(WMAX)) u_afu (
    .clk, .rst_n, .cfg(afu_cfg), .drain_start(pass_done), .wout(conv_cfg.w_in - 8'd2),
    .pool_start(pool_start && !busy), .pool_clear, .busy(afu_busy),
    .ob_rd_en(afu_rd_en), .ob_rd_col(afu_rd_col), .ob_rd_row(afu_rd_row), .ob_rd_ch(afu_rd_ch),
    .ob_rd_data, .aw_en, .aw_bank, .aw_addr, .aw_data, .fw_en, .fw_idx, .fw_data);

  // pass_done starts the drain, so the unit stays busy without a gap
  assign busy = ctrl_busy || afu_busy || pass_done;

  // the AFU owns the output-buffer read port and the activation write port
  // while busy; the host gets them when idle
  always_comb begin
    ob_rd_en   = afu_busy ? afu_rd_en  : hrd_en;
    ob_rd_col  = afu_busy ? afu_rd_col : XW'(hrd_col);
    ob_rd_row  = afu_busy ? afu_rd_row : hrd_row;
    ob_rd_ch   = afu_busy ? afu_rd_ch  : hrd_ch;
    am_wr_en   = busy ? aw_en   : act_wr_en;
    am_wr_bank = busy ? aw_bank : act_wr_bank;
    am_wr_addr = busy ? aw_addr : act_wr_addr;
    am_wr_data = busy ? aw_data : act_wr_data;
  end
  assign hrd_data = ob_rd_data;
endmodule
