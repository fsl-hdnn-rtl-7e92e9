// chip_ctrl: command decoder and top-level controller.
//
// It pops 64-bit command words {op[63:60], addr[59:36], data[35:0]} from the
// input FIFO and turns them into memory writes, configuration writes and
// operation starts for the feature extractor (FE) and the HDC classifier:
//   OP_WR_ACT  addr[14:13]=bank of fill half, addr[12:0]=word, data[15:0]
//   OP_WR_IDX  addr[12:9]=bank, addr[8:0]=word, data[35:0]
//   OP_WR_WGT  addr[10:7]=bank, addr[6:0]=word, data[15:0]
//   OP_WR_FEAT addr[9:0]=feature, data[7:0]   raw input that bypasses the FE
//   OP_WR_CFG  addr 0..7: 32-bit slice addr of the configuration vector
//              (conv_cfg at bit 0, afu_cfg at bit 64, hdc_cfg at bit 160);
//              addr 16..31: PRNG seed word addr-16, data[15:0]
//   OP_SWAP, OP_RUN_FE, OP_POOL, OP_CLR_FEAT
//   OP_TRAIN   addr[7:0]=class id, data[0]=first sample of the class
//   OP_INFER   addr[2:0]=CONV block 1..4
//   OP_RD_OUT  addr={col[5:0],row[1:0],ch[3:0]} of the output buffer
// A command waits at the FIFO head until the unit it touches is idle, so
// commands take effect in order. Results go to the output FIFO:
//   inference {4'hA, 16'd0, exit, blk[2:0], pred[7:0], dist[31:0]}
//   training  {4'h9, 60'd0} when a TRAIN finishes
//   RD_OUT    {4'hC, 44'd0, bf16 value}
// fe_clk_en / hdc_clk_en keep each unit's gated clock running while it is
// busy, while a command for it is being executed and while one of its
// single-cycle output pulses is pending.
// The command set and encodings are this design's; the published chip is
// driven by an FPGA over a 64-bit FIFO interface whose protocol is not given.
module chip_ctrl
  import fsl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // command FIFO (head)
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [63:0] cmd_data,
  // result FIFO (tail)
  output logic        res_push,
  input  logic        res_space,     // result FIFO can take a word
  output logic [63:0] res_data,
  // configuration
  output conv_cfg_t   conv_cfg,
  output afu_cfg_t    afu_cfg,
  output hdc_cfg_t    hdc_cfg,
  // feature extractor
  output logic        act_wr_en,
  output logic [1:0]  act_wr_bank,
  output logic [12:0] act_wr_addr,
  output bf16_t       act_wr_data,
  output logic        act_swap,
  output logic        idx_wr_en,
  output logic [3:0]  idx_wr_bank,
  output logic [8:0]  idx_wr_addr,
  output kidx_t       idx_wr_data,
  output logic        wgt_wr_en,
  output logic [3:0]  wgt_wr_bank,
  output logic [6:0]  wgt_wr_addr,
  output bf16_t       wgt_wr_data,
  output logic        fe_run,
  output logic        fe_pool,
  output logic        fe_pool_clear,
  output logic        fe_hrd_en,
  output logic [5:0]  fe_hrd_col,
  output logic [1:0]  fe_hrd_row,
  output logic [3:0]  fe_hrd_ch,
  input  bf16_t       fe_hrd_data,
  input  logic        fe_busy,
  input  logic        fe_pulse,      // FE single-cycle outputs pending
  // HDC classifier
  output logic        hfw_en,
  output logic [9:0]  hfw_idx,
  output logic [7:0]  hfw_data,
  output logic        feat_clear,
  output logic        seed_wr,
  output logic [3:0]  seed_idx,
  output logic [15:0] seed_data,
  output logic        train_start,
  output logic [7:0]  train_cls,
  output logic        train_new,
  output logic        infer_start,
  output logic [2:0]  infer_blk,
  input  logic        hdc_busy,
  input  logic        hdc_pulse,     // HDC single-cycle outputs pending
  input  logic        hdc_done,
  input  logic        res_valid,
  input  logic [7:0]  res_pred,
  input  logic [31:0] res_dist,
  input  logic [2:0]  res_blk,
  input  logic        res_exit,
  // clock enables
  output logic        fe_clk_en,
  output logic        hdc_clk_en
);
  op_t         op;
  logic [23:0] addr;
  logic [35:0] data;
  logic        needs_fe, needs_hdc, needs_res, can_go, fire;
  logic [255:0] cfg_vec;
  logic        rd_pend, train_pend, res_pend;
  logic [63:0] res_word;

  logic uses_feat;
  assign op   = op_t'(cmd_data[63:60]);
  assign addr = cmd_data[59:36];
  assign data = cmd_data[35:0];

  always_comb begin
    needs_fe  = 1'b0; needs_hdc = 1'b0; needs_res = 1'b0;
    unique case (op)
      OP_WR_ACT, OP_WR_IDX, OP_WR_WGT, OP_SWAP, OP_RUN_FE: needs_fe = 1'b1;
      OP_RD_OUT:              begin needs_fe = 1'b1; needs_res = 1'b1; end
      OP_POOL, OP_CLR_FEAT:   begin needs_fe = 1'b1; needs_hdc = 1'b1; end
      OP_WR_FEAT:             needs_hdc = 1'b1;
      OP_TRAIN, OP_INFER:     begin needs_hdc = 1'b1; needs_res = 1'b1; end
      OP_WR_CFG:              begin needs_fe = 1'b1; needs_hdc = 1'b1; end
      default: ;
    endcase
  end

  // one result in flight at a time keeps the result FIFO from overflowing
  // commands that read or write the feature buffer also wait for a running
  // POOL to finish delivering features (without waking the FE clock)
  assign uses_feat = (op == OP_WR_FEAT) || (op == OP_TRAIN) || (op == OP_INFER);
  assign can_go    = !((needs_fe || uses_feat) && fe_busy) && !(needs_hdc && hdc_busy) &&
                     !(needs_res && (!res_space || rd_pend || res_pend || train_pend));
  assign fire      = cmd_valid && can_go;
  assign cmd_ready = can_go;

  always_comb begin
    act_wr_en   = fire && op == OP_WR_ACT;
    act_wr_bank = addr[14:13];
    act_wr_addr = addr[12:0];
    act_wr_data = data[15:0];
    act_swap    = fire && op == OP_SWAP;
    idx_wr_en   = fire && op == OP_WR_IDX;
    idx_wr_bank = addr[12:9];
    idx_wr_addr = addr[8:0];
    idx_wr_data = data;
    wgt_wr_en   = fire && op == OP_WR_WGT;
    wgt_wr_bank = addr[10:7];
    wgt_wr_addr = addr[6:0];
    wgt_wr_data = data[15:0];
    fe_run      = fire && op == OP_RUN_FE;
    fe_pool     = fire && op == OP_POOL;
    fe_pool_clear = fire && op == OP_CLR_FEAT;
    fe_hrd_en   = fire && op == OP_RD_OUT;
    fe_hrd_col  = addr[11:6];
    fe_hrd_row  = addr[5:4];
    fe_hrd_ch   = addr[3:0];
    hfw_en      = fire && op == OP_WR_FEAT;
    hfw_idx     = addr[9:0];
    hfw_data    = data[7:0];
    feat_clear  = fire && op == OP_CLR_FEAT;
    seed_wr     = fire && op == OP_WR_CFG && addr[4];
    seed_idx    = addr[3:0];
    seed_data   = data[15:0];
    train_start = fire && op == OP_TRAIN;
    train_cls   = addr[7:0];
    train_new   = data[0];
    infer_start = fire && op == OP_INFER;
    infer_blk   = addr[2:0];
  end

  assign conv_cfg = conv_cfg_t'(cfg_vec[$bits(conv_cfg_t)-1:0]);
  assign afu_cfg  = afu_cfg_t'(cfg_vec[64 +: $bits(afu_cfg_t)]);
  assign hdc_cfg  = hdc_cfg_t'(cfg_vec[160 +: $bits(hdc_cfg_t)]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_vec <= '0;
      {rd_pend, train_pend, res_pend} <= '0;
      res_word <= '0;
    end else begin
      if (fire && op == OP_WR_CFG && !addr[4]) cfg_vec[32*addr[2:0] +: 32] <= data[31:0];
      rd_pend <= fe_hrd_en;
      if (train_start) train_pend <= 1'b1;
      if (hdc_done && train_pend && !res_valid) begin
        train_pend <= 1'b0; res_pend <= 1'b1; res_word <= {4'h9, 60'd0};
      end
      if (res_valid) begin
        res_pend <= 1'b1;
        res_word <= {4'hA, 16'd0, res_exit, res_blk, res_pred, res_dist};
      end
      if (res_pend && res_push) res_pend <= 1'b0;
    end
  end

  // RD_OUT data arrive one cycle after the read; results wait in res_word
  always_comb begin
    res_push = 1'b0;
    res_data = res_word;
    if (rd_pend) begin
      res_push = 1'b1;
      res_data = {4'hC, 44'd0, fe_hrd_data};
    end else if (res_pend && res_space) begin
      res_push = 1'b1;
    end
  end

  assign fe_clk_en  = fe_busy || fe_pulse || (cmd_valid && needs_fe);
  assign hdc_clk_en = hdc_busy || hdc_pulse || (cmd_valid && needs_hdc);
endmodule
