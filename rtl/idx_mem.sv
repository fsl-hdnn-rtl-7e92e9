// idx_mem: 36 KB weight-index memory, 16 banks of 512 x 36 bit.
//
// Bank c serves PE column c (one output channel). A 36-bit word holds the
// nine 4-bit cluster indices of one 3x3 kernel, index k = 3*ky + kx in bits
// [4k+3:4k], for one input channel; 512 words cover up to 512 input channels.
// All banks are read at the same address (the current input channel) and
// each column receives its own word. Capacity, banking and the 36-bit column
// word are as published; the word layout is this design's.
//
// Timing: synchronous write from the host side; rd_data valid the cycle
// after rd_en.
module idx_mem
  import fsl_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(BANKS)-1:0] wr_bank,
  input  logic [AW-1:0]            wr_addr,
  input  kidx_t                    wr_data,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output kidx_t                    rd_data [BANKS]
);
  kidx_t mem [BANKS][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr] <= wr_data;
    if (rd_en)
      for (int b = 0; b < int'(BANKS); b++) rd_data[b] <= mem[b][rd_addr];
  end
endmodule
