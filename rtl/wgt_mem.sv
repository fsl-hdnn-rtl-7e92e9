// wgt_mem: 4 KB codebook (weight) memory, 16 banks of 128 x BF16.
//
// Bank c serves PE column c (one output channel) and holds that channel's
// codebooks: NCB=16 centroids per group of Ch_sub=64 input channels, so 128
// words cover 8 groups = 512 input channels. During the multiply phase of a
// PE slot the sequencer steps the entry number and every column receives
// its own centroid, broadcast down the column. Capacity and banking are as
// published; address = group*16 + entry is this design's layout.
//
// Timing: synchronous write; rd_data valid the cycle after rd_en.
module wgt_mem
  import fsl_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(BANKS)-1:0] wr_bank,
  input  logic [AW-1:0]            wr_addr,
  input  bf16_t                    wr_data,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output bf16_t                    rd_data [BANKS]
);
  bf16_t mem [BANKS][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr] <= wr_data;
    if (rd_en)
      for (int b = 0; b < int'(BANKS); b++) rd_data[b] <= mem[b][rd_addr];
  end
endmodule
