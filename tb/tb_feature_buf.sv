// tb_feature_buf: overwrites random features, accumulates a second and third
// set with saturation at 255, reads every 16-feature segment back (one-cycle
// latency) against a model, and checks that clear zeroes the buffer.
`timescale 1ns/1ps
module tb_feature_buf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, wr_en, wr_acc, rd_en;
  logic [9:0] wr_idx;
  logic [7:0] wr_data, rd_data [16];
  logic [5:0] rd_seg;
  int model [1024];
  int checks = 0, failures = 0;
  feature_buf dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check_all();
    for (int s = 0; s < 64; s++) begin
      @(negedge clk); rd_en = 1; rd_seg = 6'(s);
      @(negedge clk); rd_en = 0;
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(rd_data[i]) != model[s*16+i]) begin failures++; $display("FAIL f%0d %0d vs %0d", s*16+i, rd_data[i], model[s*16+i]); end
      end
    end
  endtask
  initial begin
    {clear, wr_en, wr_acc, rd_en} = '0; wr_idx = 0; wr_data = 0; rd_seg = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 3; pass++)
      for (int i = 0; i < 1024; i++) begin
        @(negedge clk); wr_en = 1; wr_acc = (pass != 0); wr_idx = 10'(i); wr_data = 8'($urandom_range(0, 130));
        model[i] = (pass == 0) ? int'(wr_data) : ((model[i] + int'(wr_data) > 255) ? 255 : model[i] + int'(wr_data));
      end
    @(negedge clk); wr_en = 0;
    check_all();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 1024; i++) model[i] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
