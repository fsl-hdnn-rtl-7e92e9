// crp_prng: pseudo-random generator of the cyclic random projection (cRP).
//
// The 16x16 binary base block is produced by 16 linear-feedback shift
// registers of 16 bits; row i of the block is LFSR i. The base memory keeps
// the initial block (written by the host from a random seed); "load" copies
// it into the LFSRs and every "step" advances all LFSRs, giving the block of
// the next position of the D x F projection matrix. Because the sequence is
// deterministic, the whole matrix is regenerated on demand from 256 stored
// bits. 16 LFSRs x 16 bits and the stored initial block are as published.
// The feedback polynomial x^16+x^14+x^13+x^11+1 and advancing 16 shifts per
// step (so every step yields 16 fresh bits per row) are this design's. An
// all-zero seed word, which would lock an LFSR, is replaced by 1.
//
// Timing: base-memory writes, load and step take effect at the next edge;
// "block" shows the current LFSR state.
module crp_prng
  import fsl_pkg::*;
#(
  parameter int unsigned NLFSR = 16,
  parameter int unsigned W     = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     seed_wr,
  input  logic [$clog2(NLFSR)-1:0] seed_idx,
  input  logic [W-1:0]             seed_data,
  input  logic                     load,
  input  logic                     step,
  output logic [W-1:0]             block [NLFSR]
);
  logic [W-1:0] base_mem [NLFSR];
  logic [W-1:0] lfsr     [NLFSR];

  function automatic logic [W-1:0] advance(logic [W-1:0] s);
    for (int k = 0; k < int'(W); k++) s = {s[W-2:0], s[W-1] ^ s[W-3] ^ s[W-4] ^ s[W-6]};
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NLFSR); i++) begin
        base_mem[i] <= W'(i + 1);
        lfsr[i]     <= W'(i + 1);
      end
    end else begin
      if (seed_wr) base_mem[seed_idx] <= (seed_data == '0) ? W'(1) : seed_data;
      if (load)
        for (int i = 0; i < int'(NLFSR); i++) lfsr[i] <= base_mem[i];
      else if (step)
        for (int i = 0; i < int'(NLFSR); i++) lfsr[i] <= advance(lfsr[i]);
    end
  end

  assign block = lfsr;
endmodule
