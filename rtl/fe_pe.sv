// fe_pe: processing element of the weight-clustering feature extractor.
//
// A clustered 3x3 convolution is done in two steps: activations that share a
// weight index are first summed, then each of the NCB sums is multiplied by
// its codebook centroid and the products are added. The PE overlaps both
// steps with four register files (RF), each holding NCB BF16 partial sums:
// three RFs accumulate for three horizontally adjacent output pixels while
// the fourth, whose pixel has seen all three input columns, is read out
// entry by entry and multiplied by the codebook value on the weight bus into
// OutReg. Four RFs, three accumulating and one multiplying, are as published;
// the way roles rotate is read off the published timing diagram and coded
// here as: RF j works on kernel column kx = (phase - j) mod 4 and is in the
// multiply role when kx = 3.
//
// Interface / timing (one input pixel per cycle):
//   acc_en, act, kidx, ky : activation with its channel's 9 kernel indices
//                           (kidx[4k+3:4k] for k = 3*ky+kx) and kernel row.
//                           RF j adds act into entry kidx[3*ky+kx_j].
//   phase                 : slot counter mod 4 from the sequencer; it must
//                           advance by one per input column (slot).
//   mac_en, mac_addr, w   : multiply step mac_addr of the multiplying RF with
//                           codebook value w; the entry read is cleared so the
//                           RF starts its next pixel empty (design choice).
//   mac_last              : last step; out_data/out_valid appear one cycle
//                           later and hold the pixel's partial result.
module fe_pe
  import fsl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              acc_en,
  input  bf16_t             act,
  input  kidx_t             kidx,
  input  logic [1:0]        ky,
  input  logic [1:0]        phase,
  input  logic              mac_en,
  input  logic [IDX_W-1:0]  mac_addr,
  input  logic              mac_last,
  input  bf16_t             w,
  output logic              out_valid,
  output bf16_t             out_data
);
  bf16_t rf [4][NCB];
  bf16_t out_reg;
  logic [1:0] mac_rf;
  bf16_t      mac_val;

  assign mac_rf  = phase + 2'd1;                 // (phase - 3) mod 4
  assign mac_val = rf[mac_rf][mac_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < 4; j++)
        for (int k = 0; k < int'(NCB); k++) rf[j][k] <= '0;
      out_reg   <= '0;
      out_valid <= 1'b0;
    end else begin
      // accumulation in the three RFs that are not multiplying
      if (acc_en) begin
        for (int j = 0; j < 4; j++) begin
          logic [1:0] kx;
          logic [IDX_W-1:0] a;
          kx = phase - 2'(j);
          if (kx != 2'd3) begin
            a = kidx[IDX_W*(3*int'(ky)+int'(kx)) +: IDX_W];
            rf[j][a] <= bf16_add(rf[j][a], act);
          end
        end
      end
      // multiply-accumulate from the fourth RF, read-and-clear
      if (mac_en) begin
        rf[mac_rf][mac_addr] <= '0;
        out_reg <= (mac_addr == '0) ? bf16_mul(w, mac_val)
                                    : bf16_add(out_reg, bf16_mul(w, mac_val));
      end
      out_valid <= mac_en && mac_last;
    end
  end

  assign out_data = out_reg;
endmodule
