// feature_buf: 1 KB feature buffer in front of the cRP encoder.
//
// Holds up to FMAX 8-bit unsigned features. A write either overwrites an
// entry (raw input data sent by the host, which bypasses the feature
// extractor) or adds to it with saturation at 255 (pooled 4-bit features
// from the auxiliary unit, so several shots of one class are summed before
// a single encoding: batched single-pass training). The encoder reads one
// segment of 16 consecutive features per cycle.
// The 1 KB size and its place are as published; the entry width (8 bits,
// 1 KB / 1024 features), the accumulate mode and saturation are this
// design's.
//
// Timing: write in one cycle; rd_data valid the cycle after rd_en; clear
// zeroes every entry in one cycle.
module feature_buf
  import fsl_pkg::*;
#(
  parameter int unsigned FMAX = 1024,
  localparam int unsigned AW  = $clog2(FMAX),
  localparam int unsigned SW  = $clog2(FMAX / SEG)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  logic          wr_acc,      // 1: saturating add, 0: overwrite
  input  logic [AW-1:0] wr_idx,
  input  logic [7:0]    wr_data,
  input  logic          rd_en,
  input  logic [SW-1:0] rd_seg,
  output logic [7:0]    rd_data [SEG]
);
  logic [7:0] mem [FMAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(FMAX); i++) mem[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < int'(FMAX); i++) mem[i] <= '0;
    end else if (wr_en) begin
      if (wr_acc) mem[wr_idx] <= (9'(mem[wr_idx]) + 9'(wr_data) > 9'd255) ? 8'd255 : mem[wr_idx] + wr_data;
      else        mem[wr_idx] <= wr_data;
    end
  end

  always_ff @(posedge clk)
    if (rd_en)
      for (int i = 0; i < int'(SEG); i++) rd_data[i] <= mem[{rd_seg, 4'(i)}];
endmodule
