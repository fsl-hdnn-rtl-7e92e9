// tb_ee_check: drives random sequences of per-block predictions for random
// E_s, E_c and block counts and compares exit and run length with a model of
// the rule "exit once the same class has been predicted E_c times in a row,
// counting from block E_s; always exit at the last block".
`timescale 1ns/1ps
module tb_ee_check;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid, exit_now;
  logic [2:0] blk, es, ec, nblk, run_len;
  logic [7:0] pred;
  int checks = 0, failures = 0, exits_early = 0;
  ee_check dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    valid = 0; blk = 0; es = 1; ec = 2; nblk = 4; pred = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 500; s++) begin
      int len, prev;
      bit ex;
      es = 3'($urandom_range(1, 3)); ec = 3'($urandom_range(1, 3)); nblk = 3'($urandom_range(1, 4));
      len = 0; prev = -1;
      for (int b = 1; b <= int'(nblk); b++) begin
        @(negedge clk); valid = 1; blk = 3'(b); pred = 8'($urandom_range(0, 2));
        if (b < int'(es)) len = 0;
        else if (b == int'(es) || int'(pred) != prev) len = 1;
        else len++;
        prev = int'(pred);
        ex = (len != 0 && len >= int'(ec)) || b >= int'(nblk);
        @(negedge clk); valid = 0;
        checks++;
        if (exit_now != ex || int'(run_len) != len) begin
          failures++; $display("FAIL es%0d ec%0d b%0d: exit %0d/%0d len %0d/%0d", es, ec, b, exit_now, ex, run_len, len);
        end
        if (ex) begin
          if (b < int'(nblk)) exits_early++;
          break;
        end
      end
    end
    checks++;
    if (exits_early == 0) begin failures++; $display("FAIL no early exit happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
