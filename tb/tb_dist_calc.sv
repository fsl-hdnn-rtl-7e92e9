// tb_dist_calc: the combinational L1 distance of one 16-element segment is
// compared with a direct sum of absolute differences for random full-range
// 16-bit values and for the extreme case of all -32768 against all +32767.
`timescale 1ns/1ps
module tb_dist_calc;
  import fsl_pkg::*;
  hv_elem_t q [SEG], c [SEG];
  logic [20:0] seg_dist;
  int checks = 0, failures = 0;
  dist_calc dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 1001; n++) begin
      int exp;
      exp = 0;
      for (int e = 0; e < 16; e++) begin
        q[e] = (n == 1000) ? -16'sd32768 : hv_elem_t'($urandom);
        c[e] = (n == 1000) ? 16'sd32767  : hv_elem_t'($urandom);
        exp += (int'(q[e]) > int'(c[e])) ? int'(q[e]) - int'(c[e]) : int'(c[e]) - int'(q[e]);
      end
      #1; checks++;
      if (int'(seg_dist) != exp) begin failures++; $display("FAIL %0d vs %0d", seg_dist, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
