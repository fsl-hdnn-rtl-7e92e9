// fsl_pkg: constants, types and arithmetic helpers shared by the few-shot
// learning accelerator.
//
// * Feature-extractor geometry: a 4x16 processing-element (PE) array, 3x3
//   kernels, codebooks of NCB=16 BF16 centroids addressed by 4-bit indices,
//   and Ch_sub=64 input channels sharing one codebook.
// * BF16 helpers used by the PEs, the output buffer and the auxiliary unit.
//   They flush subnormals to zero and truncate (round toward zero); special
//   values (Inf/NaN) are not generated, overflow saturates to the largest
//   finite number. Rounding mode and exception handling are this design's
//   choice; the published design only states that BF16 is used.
// * Hypervector (HV) element precision helpers. Precision P is held as
//   log2(P) in 3 bits (0:1b 1:2b 2:4b 3:8b 4:16b). Elements of P>=2 bits are
//   two's complement with saturation; a 1-bit element stores the sign of a
//   bipolar value (0 = +1, 1 = -1).
// * Host command opcodes of the 64-bit FIFO interface.
package fsl_pkg;

  // ---------------- feature extractor ----------------
  localparam int unsigned PE_ROWS  = 4;
  localparam int unsigned PE_COLS  = 16;
  localparam int unsigned NCB      = 16;          // codebook entries (centroids)
  localparam int unsigned IDX_W    = 4;           // log2(NCB)
  localparam int unsigned KSZ      = 3;           // kernel size
  localparam int unsigned KIDX_W   = KSZ*KSZ*IDX_W; // 36-bit index word
  localparam int unsigned CHSUB    = 64;          // channels sharing a codebook

  typedef logic [15:0] bf16_t;
  typedef logic [KIDX_W-1:0] kidx_t;

  // one 3x3 stride-1 convolution pass over 4 output rows x 16 output channels
  typedef struct packed {
    logic [7:0]  w_in;    // input columns (outputs: w_in-2)
    logic [6:0]  gs;      // input channels per codebook group (6..CHSUB)
    logic [3:0]  ngrp;    // number of channel groups
    logic [7:0]  row0;    // first input row of the pass
    logic [12:0] pitch;   // words per 4-row band of the input layer (w_in*cin)
    logic [9:0]  cin;     // input channels of the layer (channel stride)
    logic [8:0]  ch0;     // first input channel of this pass (index-memory base)
  } conv_cfg_t;

  // post-processing of a pass by the auxiliary function unit
  typedef struct packed {
    logic [7:0]  orow0;   // output row of PE row 0 in the next layer
    logic [12:0] opitch;  // words per 4-row band of the output layer
    logic [9:0]  cout;    // channels of the output layer (channel stride)
    logic [9:0]  coff;    // output channel of PE column 0
    logic        wb_en;   // write ReLU outputs back to the activation memory
    logic        pool_en; // add ReLU outputs into the pooling accumulators
    bf16_t       pscale;  // 1/(H*W) times the 4-bit quantiser scale
    logic [10:0] npool;   // channels moved to the feature buffer by OP_POOL
  } afu_cfg_t;

  // ---------------- HDC classifier ----------------
  localparam int unsigned SEG      = 16;          // HV elements per segment / features per segment
  typedef logic signed [15:0] hv_elem_t;          // decoded HV element
  typedef logic [2:0] plog_t;                     // log2 of element precision

  typedef struct packed {
    logic [6:0]  nfseg;   // F/16 feature segments (1..64)
    logic [9:0]  nseg;    // D/16 HV segments (1..512)
    plog_t       plog;    // element precision 2^plog bits
    logic [4:0]  shift;   // encoder output right shift before saturation
    logic [7:0]  ncls;    // classes per CONV block (inference)
    logic [2:0]  es;      // early exit: first block checked (E_s)
    logic [2:0]  ec;      // early exit: consecutive agreeing blocks (E_c)
    logic [2:0]  nblk;    // CONV blocks in the network (last one always exits)
  } hdc_cfg_t;

  // ---------------- host commands ----------------
  typedef enum logic [3:0] {
    OP_NOP      = 4'h0,
    OP_WR_ACT   = 4'h1,   // addr = {bank[2:0], word[12:0]}; data[15:0]
    OP_WR_IDX   = 4'h2,   // addr = {bank[3:0], word[8:0]};  data[35:0]
    OP_WR_WGT   = 4'h3,   // addr = {bank[3:0], word[6:0]};  data[15:0]
    OP_WR_FEAT  = 4'h4,   // addr = feature index;           data[7:0] (raw input)
    OP_WR_CFG   = 4'h5,   // addr = register number;         data[31:0]
    OP_SWAP     = 4'h6,   // swap the activation double buffer
    OP_RUN_FE   = 4'h7,   // run one conv pass
    OP_POOL     = 4'h8,   // pooled features -> feature buffer
    OP_TRAIN    = 4'h9,   // addr = class id, data[0] = new class
    OP_INFER    = 4'hA,   // addr = conv block number (early exit check)
    OP_CLR_FEAT = 4'hB,   // clear feature buffer and pooling accumulators
    OP_RD_OUT   = 4'hC    // read one output-buffer pixel, addr = pixel index
  } op_t;

  // ---------------- BF16 arithmetic ----------------
  function automatic bf16_t bf16_mul(bf16_t a, bf16_t b);
    logic        s;
    logic [15:0] p;
    int          e;
    logic [6:0]  m;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return 16'h0000;
    p = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (p[15]) begin m = p[14:8]; e = e + 1; end
    else       m = p[13:7];
    if (e <= 0)   return 16'h0000;
    if (e >= 255) return {s, 8'hFE, 7'h7F};
    return {s, e[7:0], m};
  endfunction

  function automatic bf16_t bf16_add(bf16_t a, bf16_t b);
    bf16_t       big, sml;
    logic [16:0] mb, ms, r;
    int          d, e, lz;
    if (a[14:7] == 8'd0) return (b[14:7] == 8'd0) ? 16'h0000 : b;
    if (b[14:7] == 8'd0) return a;
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    d  = int'(big[14:7]) - int'(sml[14:7]);
    mb = {1'b0, 1'b1, big[6:0], 8'd0};
    ms = (d > 15) ? 17'd0 : ({1'b0, 1'b1, sml[6:0], 8'd0} >> d);
    e  = int'(big[14:7]);
    if (big[15] == sml[15]) begin
      r = mb + ms;
      if (r[16]) begin r = r >> 1; e = e + 1; end
    end else begin
      r = mb - ms;
      if (r == 17'd0) return 16'h0000;
      lz = 0;
      for (int i = 15; i >= 0; i--)
        if (r[i] && lz == 0) lz = 16 - i;   // position of the leading one, plus one
      r = r << (lz - 1);
      e = e - (lz - 1);
    end
    if (e <= 0)   return 16'h0000;
    if (e >= 255) return {big[15], 8'hFE, 7'h7F};
    return {big[15], e[7:0], r[14:8]};
  endfunction

  function automatic bf16_t bf16_relu(bf16_t a);
    return a[15] ? 16'h0000 : a;
  endfunction

  // floor of a BF16 value, clamped to [0, 2^nbits-1]
  function automatic logic [15:0] bf16_to_uint_sat(bf16_t a, int nbits);
    int          sh;
    logic [15:0] v, maxv;
    maxv = 16'((32'd1 << nbits) - 1);
    if (a[15] || a[14:7] < 8'd127) return 16'd0;
    sh = int'(a[14:7]) - 127;
    if (sh >= nbits) return maxv;
    v = 16'({1'b1, a[6:0]});
    v = (sh >= 7) ? (v << (sh - 7)) : (v >> (7 - sh));
    return (v > maxv) ? maxv : v;
  endfunction

  // ---------------- HV precision helpers ----------------
  // saturate a wide signed value to the range of a P-bit element (decoded)
  function automatic hv_elem_t hv_sat(logic signed [31:0] v, plog_t pl);
    logic signed [31:0] hi, lo;
    if (pl == 3'd0) return (v < 0) ? -16'sd1 : 16'sd1;
    hi = (32'sd1 <<< ((1 << pl) - 1)) - 32'sd1;
    lo = -(32'sd1 <<< ((1 << pl) - 1));
    if (v > hi) return hv_elem_t'(hi);
    if (v < lo) return hv_elem_t'(lo);
    return hv_elem_t'(v);
  endfunction

  // decoded element -> P-bit code in the low bits of a 16-bit word
  function automatic logic [15:0] hv_pack(hv_elem_t v, plog_t pl);
    if (pl == 3'd0) return {15'd0, v[15]};
    return 16'(v) & 16'((32'd1 << (1 << pl)) - 1);
  endfunction

  // P-bit code (low bits) -> decoded element (sign extended / bipolar)
  function automatic hv_elem_t hv_unpack(logic [15:0] c, plog_t pl);
    int w;
    if (pl == 3'd0) return c[0] ? -16'sd1 : 16'sd1;
    w = 1 << pl;
    return hv_elem_t'($signed(c << (16 - w)) >>> (16 - w));
  endfunction

endpackage
