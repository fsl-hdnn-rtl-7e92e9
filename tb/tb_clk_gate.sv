// tb_clk_gate: the gated clock must pulse exactly in the cycles whose enable
// was high while the clock was low, must ignore enable changes during the
// high phase (no glitches or shortened pulses), and must run freely when
// test_en is set.
`timescale 1ns/1ps
module tb_clk_gate;
  logic clk = 0, en = 0, test_en = 0, gclk;
  always #5 clk = ~clk;
  int pulses = 0, expected = 0, checks = 0, failures = 0;
  realtime rise;
  clk_gate dut (.*);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge gclk) begin pulses++; rise = $realtime; end
  always @(negedge gclk) begin
    checks++;
    if ($realtime - rise < 4.9) begin failures++; $display("FAIL short pulse at %0t", $realtime); end
  end
  initial begin
    #1;
    for (int c = 0; c < 1000; c++) begin
      logic e, t;
      e = $urandom_range(0, 1); t = ($urandom_range(0, 9) == 0);
      #3 en = e; test_en = t;                 // low phase: sampled
      if (e || t) expected++;
      #4 en = $urandom_range(0, 1);          // high phase: must be ignored
      #3;
    end
    #10; checks++;
    if (pulses != expected) begin failures++; $display("FAIL pulses %0d vs %0d", pulses, expected); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
