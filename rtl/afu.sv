// afu: auxiliary function unit of the feature extractor.
//
// Two jobs, started separately:
//  * drain: after a PE-array pass it reads the output buffer pixel by pixel
//    (column, row, channel order), applies ReLU, optionally writes the result
//    into the fill half of the activation memory as the next layer's input
//    (row y in bank y mod 4, address (y/4)*opitch + x*cout + coff + ch), and
//    optionally adds it into a per-channel BF16 pooling accumulator.
//  * pool: for each of npool channels it scales the accumulated sum by
//    pscale (1/(H*W) times the quantiser scale), floors it to a 4-bit
//    unsigned feature and sends it to the feature buffer, which adds it to
//    what it holds, then clears the accumulator. Running several shots of one
//    class before a pool (or several pools before training) sums their
//    features, which is how batched single-pass training aggregates a class.
// Average pooling of each CONV block, per-label aggregation and 4-bit
// features follow the published design; ReLU, the write-back layout and the
// scale register are this design's choices.
//
// Timing: drain takes wout*64 + 2 cycles, pool takes npool + 1 cycles; busy
// is high meanwhile. Output-buffer reads have one cycle latency.
module afu
  import fsl_pkg::*;
#(
  parameter int unsigned CMAX = 512,
  parameter int unsigned WMAX = 64,
  localparam int unsigned XW  = $clog2(WMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  afu_cfg_t      cfg,
  input  logic          drain_start,
  input  logic [7:0]    wout,
  input  logic          pool_start,
  input  logic          pool_clear,
  output logic          busy,
  // output buffer read port
  output logic          ob_rd_en,
  output logic [XW-1:0] ob_rd_col,
  output logic [1:0]    ob_rd_row,
  output logic [3:0]    ob_rd_ch,
  input  bf16_t         ob_rd_data,
  // activation memory write port (fill half)
  output logic          aw_en,
  output logic [1:0]    aw_bank,
  output logic [12:0]   aw_addr,
  output bf16_t         aw_data,
  // feature buffer accumulate port
  output logic          fw_en,
  output logic [9:0]    fw_idx,
  output logic [7:0]    fw_data
);
  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_POOL} state_t;
  state_t state;

  bf16_t pool_acc [CMAX];
  logic [7:0]  x;
  logic [1:0]  r;
  logic [3:0]  k;
  logic [10:0] pc;
  // pipeline stage 1 (data from the output buffer)
  logic        v1;
  logic [7:0]  x1;
  logic [1:0]  r1;
  logic [3:0]  k1;
  bf16_t       relu_v;
  logic [9:0]  ch1;
  logic [7:0]  y1;

  assign busy      = (state != S_IDLE) || v1;
  assign ob_rd_en  = (state == S_DRAIN);
  assign ob_rd_col = XW'(x);
  assign ob_rd_row = r;
  assign ob_rd_ch  = k;
  assign relu_v    = bf16_relu(ob_rd_data);
  assign ch1       = cfg.coff + 10'(k1);
  assign y1        = cfg.orow0 + 8'(r1);

  always_comb begin
    aw_en   = v1 && cfg.wb_en;
    aw_bank = y1[1:0];
    aw_addr = 13'(32'(y1[7:2]) * 32'(cfg.opitch) + 32'(x1) * 32'(cfg.cout) + 32'(ch1));
    aw_data = relu_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {x, r, k, pc} <= '0;
      {v1, x1, r1, k1} <= '0;
      {fw_en, fw_idx, fw_data} <= '0;
      for (int c = 0; c < int'(CMAX); c++) pool_acc[c] <= '0;
    end else begin
      fw_en <= 1'b0;
      v1 <= 1'b0;
      // stage 1: pooling accumulation of the pixel read last cycle
      if (v1 && cfg.pool_en && ch1 < 10'(CMAX))
        pool_acc[ch1[$clog2(CMAX)-1:0]] <= bf16_add(pool_acc[ch1[$clog2(CMAX)-1:0]], relu_v);
      if (pool_clear)
        for (int c = 0; c < int'(CMAX); c++) pool_acc[c] <= '0;
      unique case (state)
        S_IDLE: begin
          if (drain_start && wout != 0) begin
            state <= S_DRAIN; {x, r, k} <= '0;
          end else if (pool_start && cfg.npool != 0) begin
            state <= S_POOL; pc <= '0;
          end
        end
        S_DRAIN: begin
          v1 <= 1'b1; x1 <= x; r1 <= r; k1 <= k;
          k <= k + 4'd1;
          if (k == 4'd15) begin
            r <= r + 2'd1;
            if (r == 2'd3) begin
              x <= x + 8'd1;
              if (x == wout - 8'd1) state <= S_IDLE;
            end
          end
        end
        S_POOL: begin
          fw_en   <= 1'b1;
          fw_idx  <= pc[9:0];
          fw_data <= {4'd0, 4'(bf16_to_uint_sat(bf16_mul(pool_acc[pc[$clog2(CMAX)-1:0]], cfg.pscale), 4))};
          pool_acc[pc[$clog2(CMAX)-1:0]] <= '0;
          pc <= pc + 11'd1;
          if (pc == cfg.npool - 11'd1 || pc == 11'(CMAX - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
