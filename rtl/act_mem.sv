// act_mem: 128 KB activation memory, 8 banks of 8192 x BF16, double-buffered.
//
// The banks form two halves of four. The PE array reads from the "compute"
// half while writes (host loads, or AFU write-back of the next layer's input)
// go to the "fill" half; a swap pulse exchanges the halves, so activation
// loading overlaps computation. Within a half, input row y lives in bank
// y mod 4, so the four consecutive rows needed by the four PE rows are read
// in one cycle with one address per bank.
// Bank count, capacity and double buffering are as published; the split into
// halves, the row-to-bank mapping and the port protocol are this design's.
//
// Timing: synchronous write; rd_data is valid the cycle after rd_en.
module act_mem
  import fsl_pkg::*;
#(
  parameter int unsigned BANKS = 8,
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned HB   = BANKS / 2,
  localparam int unsigned BW   = $clog2(HB)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              swap,            // exchange compute and fill halves
  output logic              rd_half,         // half currently read by the PEs
  input  logic              wr_en,
  input  logic [BW-1:0]     wr_bank,     // bank within the fill half
  input  logic [AW-1:0]     wr_addr,
  input  bf16_t             wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr [HB],    // one address per bank of the compute half
  output bf16_t             rd_data [HB]
);
  bf16_t mem [BANKS][DEPTH];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    rd_half <= 1'b0;
    else if (swap) rd_half <= ~rd_half;

  always_ff @(posedge clk) begin
    if (wr_en) mem[{~rd_half, wr_bank}][wr_addr] <= wr_data;
    if (rd_en)
      for (int b = 0; b < int'(HB); b++) rd_data[b] <= mem[{rd_half, BW'(b)}][rd_addr[b]];
  end
endmodule
