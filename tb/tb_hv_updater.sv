// tb_hv_updater: random class and encoded segments at each precision,
// with and without the "new class" zero select; the registered output must
// equal the saturated sum (or the sign at 1 bit), one cycle after en.
`timescale 1ns/1ps
module tb_hv_updater;
  import fsl_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, zero;
  plog_t plog;
  hv_elem_t cls_data [SEG], enc_data [SEG], upd_data [SEG];
  int checks = 0, failures = 0;
  hv_updater dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int qref(int v, int pl);
    int w, hi, lo;
    if (pl == 0) return (v < 0) ? -1 : 1;
    w = 1 << pl; hi = (1 << (w - 1)) - 1; lo = -(1 << (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
  initial begin
    en = 0; zero = 0; plog = 3'd4;
    for (int e = 0; e < 16; e++) begin cls_data[e] = 0; enc_data[e] = 0; end
    for (int n = 0; n < 300; n++) begin
      int pl, w;
      @(negedge clk);
      pl = $urandom_range(0, 4); w = 1 << pl;
      plog = 3'(pl); zero = ($urandom_range(0, 3) == 0); en = 1;
      for (int e = 0; e < 16; e++) begin
        cls_data[e] = hv_elem_t'(qref(int'($urandom_range(0, 65535)) - 32768, pl));
        enc_data[e] = hv_elem_t'(qref(int'($urandom_range(0, 65535)) - 32768, pl));
      end
      @(negedge clk); en = 0;
      for (int e = 0; e < 16; e++) begin
        int exp;
        exp = qref((zero ? 0 : int'(cls_data[e])) + int'(enc_data[e]), pl);
        checks++;
        if (int'(upd_data[e]) != exp) begin failures++; $display("FAIL p%0d z%0d %0d+%0d -> %0d", pl, zero, cls_data[e], enc_data[e], upd_data[e]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
