// io_fifo: 64-bit synchronous FIFO of the chip's host interface.
//
// One instance buffers command words from the host, another buffers result
// words to the host. Both sides use valid/ready: a word moves when valid and
// ready are both high at a rising edge. The 64-bit width is as published;
// the depth and the handshake are this design's. An assertion checks the
// writer side of the handshake: a word offered but not accepted must stay
// offered, unchanged, in the next cycle.
//
// Timing: a pushed word is visible at the output the cycle after the push.
module io_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end

  always_ff @(posedge clk)
    if (push) mem[wp] <= in_data;

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data))
    else $error("io_fifo: offered word withdrawn or changed before it was accepted");
endmodule
