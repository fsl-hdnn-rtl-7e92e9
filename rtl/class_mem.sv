// class_mem: 256 KB class-hypervector memory with its padding unit.
//
// 16 banks of 8192 x 16 bit; bank e holds element e of every 16-element HV
// segment, so one access moves a whole segment (256 bits at 16-bit
// precision). At precision P = 2^plog bits a 16-bit word packs 16/P
// elements belonging to 16/P consecutive segments: segment d of class cls is
// in word cls*(nseg*P/16) + d/(16/P), field d mod (16/P). The padding unit
// unpacks the field of every bank to a 16-bit element on reads and inserts a
// new field into the stored word on writes (read-modify-write), so the same
// memory holds 32 class HVs of D=4096 at 16 bit or 128 at 4 bit.
// Banking, word size and the capacities are as published; the packing
// layout and the restriction of P to 1, 2, 4, 8, 16 are this design's.
// Gating of unused banks is not modelled.
//
// Timing: rd_data valid the cycle after rd_en; writes take effect at the
// clock edge.
module class_mem
  import fsl_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  plog_t       plog,
  input  logic [9:0]  nseg,           // D/16
  input  logic        rd_en,
  input  logic [7:0]  rd_cls,
  input  logic [9:0]  rd_seg,
  output hv_elem_t    rd_data [SEG],
  input  logic        wr_en,
  input  logic [7:0]  wr_cls,
  input  logic [9:0]  wr_seg,
  input  hv_elem_t    wr_data [SEG]
);
  logic [15:0] mem [SEG][DEPTH];
  logic [AW-1:0] rd_a, wr_a;
  logic [3:0]    rd_sh, wr_sh;
  logic [3:0]    rd_sh_q;
  plog_t         plog_q;

  // word address and bit offset of segment d of class c
  function automatic logic [AW-1:0] word_addr(logic [7:0] c, logic [9:0] d, plog_t pl, logic [9:0] ns);
    logic [31:0] wpc;
    wpc = 32'(ns) >> (3'd4 - pl);
    return AW'(32'(c) * wpc + (32'(d) >> (3'd4 - pl)));
  endfunction
  function automatic logic [3:0] bit_off(logic [9:0] d, plog_t pl);
    logic [9:0] sub;
    sub = d & ((10'd1 << (3'd4 - pl)) - 10'd1);
    return 4'(sub << pl);
  endfunction

  assign rd_a  = word_addr(rd_cls, rd_seg, plog, nseg);
  assign wr_a  = word_addr(wr_cls, wr_seg, plog, nseg);
  assign rd_sh = bit_off(rd_seg, plog);
  assign wr_sh = bit_off(wr_seg, plog);

  logic [15:0] rd_word [SEG];
  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int e = 0; e < int'(SEG); e++) rd_word[e] <= mem[e][rd_a];
      rd_sh_q <= rd_sh;
      plog_q  <= plog;
    end
    if (wr_en)
      for (int e = 0; e < int'(SEG); e++) begin
        logic [15:0] fmask;
        fmask = 16'((32'd1 << (1 << plog)) - 1) << wr_sh;
        mem[e][wr_a] <= (mem[e][wr_a] & ~fmask) | ((hv_pack(wr_data[e], plog) << wr_sh) & fmask);
      end
  end

  // padding unit, read side
  always_comb
    for (int e = 0; e < int'(SEG); e++) rd_data[e] = hv_unpack(rd_word[e] >> rd_sh_q, plog_q);
endmodule
