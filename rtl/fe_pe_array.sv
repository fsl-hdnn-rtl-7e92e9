// fe_pe_array: the 4x16 array of weight-clustering PEs.
//
// Each column computes one output channel, so the nine kernel indices and the
// codebook value of that channel are broadcast down the column. Each row
// computes one output row: the four rows take activations of the same input
// column and channel from four consecutive input rows (one row bus per PE
// row), producing four vertically adjacent output pixels at once. All PEs
// share the sequencing signals (phase, kernel row, multiply step), so they
// run in lock step and their results are valid in the same cycle.
// Geometry and the row/column broadcast follow the published architecture;
// the control signal set is this design's own (see fe_pe for timing).
module fe_pe_array
  import fsl_pkg::*;
#(
  parameter int unsigned ROWS = PE_ROWS,
  parameter int unsigned COLS = PE_COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              acc_en,
  input  bf16_t             act      [ROWS],
  input  kidx_t             kidx     [COLS],
  input  logic [1:0]        ky,
  input  logic [1:0]        phase,
  input  logic              mac_en,
  input  logic [IDX_W-1:0]  mac_addr,
  input  logic              mac_last,
  input  bf16_t             w        [COLS],
  output logic              out_valid,
  output bf16_t             out_data [ROWS][COLS]
);
  logic vld [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      fe_pe u_pe (
        .clk, .rst_n, .acc_en,
        .act      (act[r]),
        .kidx     (kidx[c]),
        .ky, .phase, .mac_en, .mac_addr, .mac_last,
        .w        (w[c]),
        .out_valid(vld[r][c]),
        .out_data (out_data[r][c])
      );
    end
  end

  // all PEs share their control, so one valid flag represents the array
  assign out_valid = vld[0][0];
endmodule
