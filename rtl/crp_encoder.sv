// crp_encoder: datapath of the cyclic random projection encoder.
//
// Each cycle with "en" it multiplies a 16-element feature segment by the
// current 16x16 binary block (bit 1 = +1, bit 0 = -1: the product is +f or
// -f, no multiplier needed), reduces each of the 16 rows with a 16-input
// adder tree and adds the 16 sums into the segment accumulators ("first"
// restarts them). After F/16 cycles the accumulators hold 16 elements of
// the encoded hypervector h = B x. They are quantised to the configured
// element precision by an arithmetic right shift and saturation (P = 1 keeps
// the sign), giving "hv". Binary multiplication and 16 adder trees of 16
// inputs are as published; the sign convention and quantiser are this
// design's.
//
// Timing: accumulators update at the clock edge; hv is combinational from
// them.
module crp_encoder
  import fsl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        first,
  input  logic [7:0]  feat  [SEG],
  input  logic [15:0] block [SEG],
  input  plog_t       plog,
  input  logic [4:0]  shift,
  output logic signed [23:0] acc [SEG],
  output hv_elem_t    hv    [SEG]
);
  logic signed [12:0] tree [SEG];

  always_comb
    for (int i = 0; i < int'(SEG); i++) begin
      tree[i] = '0;
      for (int j = 0; j < int'(SEG); j++)
        tree[i] = block[i][j] ? tree[i] + 13'(feat[j]) : tree[i] - 13'(feat[j]);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      for (int i = 0; i < int'(SEG); i++) acc[i] <= '0;
    else if (en)
      for (int i = 0; i < int'(SEG); i++)
        acc[i] <= (first ? 24'sd0 : acc[i]) + 24'(tree[i]);

  always_comb
    for (int i = 0; i < int'(SEG); i++) hv[i] = hv_sat(32'(acc[i] >>> shift), plog);
endmodule
