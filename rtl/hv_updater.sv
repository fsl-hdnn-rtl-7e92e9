// hv_updater: training datapath of the HDC classifier (HV updater + HV reg).
//
// For one 16-element segment it adds the encoded query segment to the class
// segment read from the class memory, or to zero when a class is trained for
// the first time (the zero input of the published multiplexer), and
// saturates each of the 16 sums to the configured element precision (P = 1
// keeps the sign). The result is registered in the HV register, from which
// it is written back. This is the bundling step C_j = sum_i h_i^j done
// element-wise. 16 parallel adders and the zero/memory multiplexer are as
// published; saturation is this design's choice.
//
// Timing: upd_data is registered; it is valid the cycle after "en".
module hv_updater
  import fsl_pkg::*;
(
  input  logic     clk,
  input  logic     en,
  input  logic     zero,             // new class: add to 0 instead of memory
  input  plog_t    plog,
  input  hv_elem_t cls_data [SEG],
  input  hv_elem_t enc_data [SEG],
  output hv_elem_t upd_data [SEG]
);
  always_ff @(posedge clk)
    if (en)
      for (int e = 0; e < int'(SEG); e++)
        upd_data[e] <= hv_sat(32'(zero ? 16'sd0 : cls_data[e]) + 32'(enc_data[e]), plog);
endmodule
