// tb_crp_encoder: accumulates 4 feature segments against random binary
// blocks and compares the 16 accumulators with B*x computed directly
// (bit 1 = +f, bit 0 = -f); then checks the quantised output for 16, 4 and
// 1 bit precision with shifts, including saturation, and that "first"
// restarts the accumulation.
`timescale 1ns/1ps
module tb_crp_encoder;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, first;
  logic [7:0] feat [16];
  logic [15:0] block [16];
  plog_t plog;
  logic [4:0] shift;
  logic signed [23:0] acc [16];
  hv_elem_t hv [16];
  int ref_acc [16];
  int checks = 0, failures = 0;
  crp_encoder dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int qref(int v, int pl, int sh);
    int w, hi, lo;
    v = v >>> sh;
    if (pl == 0) return (v < 0) ? -1 : 1;
    w = 1 << pl; hi = (1 << (w - 1)) - 1; lo = -(1 << (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  initial begin
    en = 0; first = 0; plog = 3'd4; shift = 0;
    for (int i = 0; i < 16; i++) begin feat[i] = 0; block[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < 16; i++) ref_acc[i] = 0;
      for (int s = 0; s < 4; s++) begin
        @(negedge clk); en = 1; first = (s == 0);
        for (int j = 0; j < 16; j++) feat[j] = 8'($urandom_range(0, 255));
        for (int i = 0; i < 16; i++) begin
          block[i] = 16'($urandom);
          for (int j = 0; j < 16; j++) ref_acc[i] += block[i][j] ? int'(feat[j]) : -int'(feat[j]);
        end
      end
      @(negedge clk); en = 0;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(acc[i]) != ref_acc[i]) begin failures++; $display("FAIL acc %0d: %0d vs %0d", i, acc[i], ref_acc[i]); end
      end
      for (int pl = 0; pl <= 4; pl += 2)
        for (int sh = 0; sh <= 6; sh += 3) begin
          plog = 3'(pl); shift = 5'(sh); #1;
          for (int i = 0; i < 16; i++) begin
            checks++;
            if (int'(hv[i]) != qref(ref_acc[i], pl, sh)) begin
              failures++; $display("FAIL q pl%0d sh%0d %0d: %0d vs %0d", pl, sh, i, hv[i], qref(ref_acc[i], pl, sh));
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
