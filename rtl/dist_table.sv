// dist_table: 256 x 32 bit distance table of the inference module.
//
// During a query, entry j (j < 128) accumulates the distance of class j
// segment by segment ("acc" port: entry += value); "clear" zeroes those
// entries before a query. After the query the per-block prediction and its
// distance are stored through the write port at entries 128+2b and 129+2b
// so that the early-exit check can refer to earlier blocks. Capacity is as
// published; this entry layout is this design's.
//
// Timing: reads are combinational; acc, write and clear act at the edge
// (write wins over acc on the same entry).
module dist_table
  import fsl_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     acc_en,
  input  logic [$clog2(DEPTH)-1:0] acc_addr,
  input  logic [31:0]              acc_val,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [31:0]              wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [31:0]              rd_data
);
  logic [31:0] tbl [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) tbl[i] <= '0;
    end else begin
      if (clear)
        for (int i = 0; i < int'(DEPTH) / 2; i++) tbl[i] <= '0;
      else if (acc_en)
        tbl[acc_addr] <= tbl[acc_addr] + acc_val;
      if (wr_en) tbl[wr_addr] <= wr_data;
    end
  end

  assign rd_data = tbl[rd_addr];
endmodule
