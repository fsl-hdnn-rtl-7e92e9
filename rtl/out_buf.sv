// out_buf: output feature buffer of the feature extractor.
//
// It holds the 4 rows x 16 channels of output pixels of one PE-array pass,
// one 64-pixel word per output column. Because a codebook is shared by only
// Ch_sub input channels, a pixel's result arrives once per channel group;
// the buffer writes the first group's result and adds (in BF16) every later
// group's result into the stored word, 64 adders in parallel. The auxiliary
// function unit then drains the buffer one pixel at a time.
// The buffer is named in the published architecture; its size (WMAX output
// columns) and the cross-group accumulation placed here are this design's.
//
// Timing: write/accumulate in one cycle; rd_data valid the cycle after rd_en.
module out_buf
  import fsl_pkg::*;
#(
  parameter int unsigned WMAX = 64,
  parameter int unsigned ROWS = PE_ROWS,
  parameter int unsigned COLS = PE_COLS,
  localparam int unsigned XW  = $clog2(WMAX)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_acc,     // 0: overwrite, 1: add to stored
  input  logic [XW-1:0]           wr_col,
  input  bf16_t                   wr_data [ROWS][COLS],
  input  logic                    rd_en,
  input  logic [XW-1:0]           rd_col,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  input  logic [$clog2(COLS)-1:0] rd_ch,
  output bf16_t                   rd_data
);
  bf16_t mem [WMAX][ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int r = 0; r < int'(ROWS); r++)
        for (int c = 0; c < int'(COLS); c++)
          mem[wr_col][r][c] <= wr_acc ? bf16_add(mem[wr_col][r][c], wr_data[r][c])
                                      : wr_data[r][c];
    if (rd_en) rd_data <= mem[rd_col][rd_row][rd_ch];
  end
endmodule
