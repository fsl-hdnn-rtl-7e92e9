// tb_io_fifo: pushes 2000 random 64-bit words with random valid and ready
// patterns (holding each offered word until accepted); the popped order
// must match, the FIFO must fill (in_ready low) and drain, and the count
// output must track the occupancy.
`timescale 1ns/1ps
module tb_io_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  logic [4:0] count;
  logic [63:0] q [$];
  bit took = 0;
  int sent = 0, got = 0, full_seen = 0, checks = 0, failures = 0;
  io_fifo dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    took <= in_valid && in_ready;
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready) begin
      checks++; got++;
      if (q.size() == 0 || out_data != q[0]) begin failures++; $display("FAIL word %0d", got); end
      else void'(q.pop_front());
    end
  end
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != q.size()) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
    if (!in_ready) full_seen++;
  end
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      begin
        while (sent < 2000) begin
          @(negedge clk);
          if (!in_valid || took) begin
            if (took) sent++;
            in_valid = (sent < 2000) && ($urandom_range(0, 3) != 0);
            in_data = {$urandom, $urandom};
          end
        end
        in_valid = 0;
      end
      begin
        for (int c = 0; got < 2000; c++) begin
          @(negedge clk);
          out_ready = (c < 300) ? ($urandom_range(0, 7) == 0) : ($urandom_range(0, 1) == 1);
        end
      end
    join
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL fifo never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
