// dist_calc: L1 distance of one 16-element hypervector segment.
//
// Subtracts each class element from the corresponding query element, takes
// the absolute values and sums the 16 magnitudes in an adder tree. The
// controller accumulates the segment distances of a class over all D/16
// segments in the distance table. Subtract/absolute/accumulate is as
// published; it is combinational here.
module dist_calc
  import fsl_pkg::*;
(
  input  hv_elem_t     q [SEG],
  input  hv_elem_t     c [SEG],
  output logic [20:0]  seg_dist
);
  always_comb begin
    seg_dist = '0;
    for (int e = 0; e < int'(SEG); e++) begin
      logic signed [16:0] d, a;
      d = 17'(q[e]) - 17'(c[e]);
      a = (d < 0) ? -d : d;
      seg_dist = seg_dist + 21'(unsigned'(a));
    end
  end
endmodule
