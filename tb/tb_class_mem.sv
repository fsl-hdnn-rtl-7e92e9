// tb_class_mem: for 16, 8, 4, 2 and 1 bit precision, writes random
// in-range HV segments for 6 classes of D=512 (32 segments), in shuffled
// order so that neighbouring packed fields are written at different times,
// then reads every segment back (one-cycle latency) and compares. At 1 bit
// the stored value is the sign, so the model keeps +1 or -1.
`timescale 1ns/1ps
module tb_class_mem;
  import fsl_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  plog_t plog;
  logic [9:0] nseg, rd_seg, wr_seg;
  logic rd_en, wr_en;
  logic [7:0] rd_cls, wr_cls;
  hv_elem_t rd_data [SEG], wr_data [SEG];
  int model [6][32][16];
  int order [192];
  int checks = 0, failures = 0;
  class_mem dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rd_en = 0; wr_en = 0; nseg = 10'd32; plog = 3'd4; rd_seg = 0; wr_seg = 0; rd_cls = 0; wr_cls = 0;
    for (int e = 0; e < 16; e++) wr_data[e] = 0;
    for (int pl = 4; pl >= 0; pl--) begin
      plog = 3'(pl);
      for (int i = 0; i < 192; i++) order[i] = i;
      for (int i = 191; i > 0; i--) begin
        int j, t;
        j = $urandom_range(0, i); t = order[i]; order[i] = order[j]; order[j] = t;
      end
      for (int k = 0; k < 192; k++) begin
        int c, s;
        c = order[k] / 32; s = order[k] % 32;
        @(negedge clk); wr_en = 1; wr_cls = 8'(c); wr_seg = 10'(s);
        for (int e = 0; e < 16; e++) begin
          int v;
          if (pl == 0) v = $urandom_range(0, 1) ? 1 : -1;
          else v = int'($urandom_range(0, (1 << (1 << pl)) - 1)) - (1 << ((1 << pl) - 1));
          wr_data[e] = hv_elem_t'(v); model[c][s][e] = v;
        end
      end
      @(negedge clk); wr_en = 0;
      for (int c = 0; c < 6; c++)
        for (int s = 0; s < 32; s++) begin
          rd_en = 1; rd_cls = 8'(c); rd_seg = 10'(s);
          @(negedge clk); rd_en = 0;
          for (int e = 0; e < 16; e++) begin
            checks++;
            if (int'(rd_data[e]) != model[c][s][e]) begin
              failures++; $display("FAIL p%0d c%0d s%0d e%0d: %0d vs %0d", pl, c, s, e, rd_data[e], model[c][s][e]);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
