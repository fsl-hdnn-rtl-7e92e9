// tb_min_finder: streams random distance lists (with deliberate ties) and
// checks that the result is the first smallest distance and its id; start
// must reset the search between lists.
`timescale 1ns/1ps
module tb_min_finder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, valid;
  logic [7:0] id, min_id;
  logic [31:0] dist_in, min_dist;
  int checks = 0, failures = 0;
  min_finder dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0; valid = 0; id = 0; dist_in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < 100; l++) begin
      int n, best;
      logic [31:0] bd;
      n = $urandom_range(1, 128); best = 0; bd = '1;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int i = 0; i < n; i++) begin
        valid = 1; id = 8'(i); dist_in = 32'($urandom_range(0, 40));
        if (dist_in < bd) begin bd = dist_in; best = i; end
        @(negedge clk);
      end
      valid = 0; checks++;
      if (int'(min_id) != best || min_dist != bd) begin failures++; $display("FAIL list %0d: %0d/%0d vs %0d/%0d", l, min_id, min_dist, best, bd); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
