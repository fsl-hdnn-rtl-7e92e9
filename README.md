# FSL-HDnn in SystemVerilog: few-shot learning with a clustered CNN and hyperdimensional computing

A device that must learn new classes from a handful of user examples cannot
afford back-propagation. This design avoids it completely. A fixed,
pretrained CNN turns every image into a short feature vector. A
hyperdimensional-computing (HDC) classifier then learns in one pass:

- **Encoding.** The feature vector is projected to a long vector of
  integers, the hypervector (HV), through a pseudo-random ±1 matrix.
- **Training.** Training a class adds its HV into that class's
  accumulator.
- **Inference.** The class is chosen by the smallest L1 distance.

Two tricks keep the hardware small:

- **Clustered weights.** The CNN's weights are clustered. Every 3×3 kernel
  stores nine 4-bit indices into a 16-entry codebook of BF16 centroids, and
  one codebook is shared by a group of input channels. The convolution
  first sums the activations that share an index, then multiplies each of
  the 16 sums once.
- **A generated projection matrix.** The matrix is never stored. A bank
  of LFSRs regenerates it 16×16 bits at a time.

On top of that, classifiers can be attached after each of the CNN's four
convolution blocks. Inference may then stop early once consecutive blocks
agree on the class.

This repository holds the RTL of the whole chip core:

- the feature extractor: memories, a 4×16 PE array, the output buffer,
  the auxiliary function unit and the sequencer;
- the HDC classifier: feature buffer, cyclic random-projection encoder,
  class memory, training and inference datapaths, and the early-exit check;
- the command interface: a 64-bit FIFO pair with a decoder;
- clock gating.

It also holds a self-checking testbench for every block and a chip-level
testbench driven only through the command FIFO.

## 1. Data flow at a glance

```
 host ──64b cmd FIFO──► chip_ctrl ──┬──► feature_extractor ──(4-bit pooled features)──┐
                                    │      act_mem (2×4 banks, BF16, double-buffered)  │
                                    │      idx_mem (16 banks × 36b = 9 × 4b indices)   │
                                    │      wgt_mem (16 banks of BF16 codebooks)        │
                                    │      fe_pe_array 4×16 ─► out_buf ─► afu          │
                                    │                                                  ▼
                                    └──► hdc_classifier: feature_buf ─► crp_encoder ─► class_mem
                                               crp_prng ─┘     hv_updater / dist_calc ─► dist_table ─► min_finder ─► ee_check
 host ◄─64b result FIFO◄── chip_ctrl ◄── (prediction, distance, exit) / train done / readback
```

Everything runs on one clock. The feature extractor (FE) and the HDC
classifier each have their own gated copy of it.

## 2. Clustered convolution in the PE: the part to read first

For output pixel `(x, y)` and output channel `k`, a clustered 3×3 convolution
over the channels `c` of one codebook group is

```
out = Σ_c Σ_ky Σ_kx  A[y+ky][x+kx][c] · CB_k[ idx_k[c][ky][kx] ]
    = Σ_n  CB_k[n] · ( Σ over (c,ky,kx) with idx = n  of  A[y+ky][x+kx][c] )
```

The inner bracket needs only additions. Each PE keeps it as a register file
(RF) of 16 BF16 partial sums, one per codebook entry.

### Role rotation

One PE serves one output row (its PE row) and one output channel (its PE
column). Over time it serves every output column. An input pixel at column
`x` contributes to three output pixels: `x-2`, `x-1` and `x`, through kernel
columns 2, 1 and 0. So each PE has **four RFs**:

- three of them accumulate for three neighbouring output pixels;
- the fourth, whose pixel has now seen all three of its input columns, is
  multiplied out.

Time is cut into **slots**. A slot is one input column, or `3·gs` cycles:
`gs` channels of the group times three kernel rows. Slot number `s` sets the
phase `s mod 4`. RF `j` uses kernel column `kx = (phase − j) mod 4`:

| phase | RF0 | RF1 | RF2 | RF3 |
|---|---|---|---|---|
| 0 | kx 0 | **MAC** | kx 2 | kx 1 |
| 1 | kx 1 | kx 0 | **MAC** | kx 2 |
| 2 | kx 2 | kx 1 | kx 0 | **MAC** |
| 3 | **MAC** | kx 2 | kx 1 | kx 0 |

An RF starts a new output pixel with kx 0 and finishes it with kx 2. It then
spends one slot in the MAC role.

**Accumulating.** In every accumulating cycle, RF `j` adds the broadcast
activation into entry `idx[c][ky][kx_j]`. The 36-bit index word carries the
channel's nine indices, with kernel position `3·ky+kx` at bits `4(3ky+kx)+:4`.

**Multiplying.** In the MAC role, during the first 16 cycles of the slot,
entry `t` is read, multiplied by codebook value `CB[t]` from the weight bus,
and added into OutReg. The entry is cleared as it is read (read-and-clear).
The RF is therefore empty when it takes up its next pixel, and no separate
clear cycle is needed. The finished pixel leaves the PE one cycle after the
16th product.

A slot must be at least 17 cycles long, so `gs ≥ 6`. The design's default
group size is Ch_sub = 64, which gives 192-cycle slots.

**What is the paper's and what is ours.** The paper gives:

- four RFs per PE, three accumulating and one multiplying;
- the 16-entry codebook (4-bit index);
- Ch_sub-channel groups that share a codebook;
- the 3·Ch_sub slot length in its timing diagram.

Our own choices are the exact role rotation, the read-and-clear and the
output timing.

### The array

The 4×16 PEs share buses:

- PE row `r` receives activation bus `r`, which carries input row `y0+ky+r`;
- PE column `k` receives index bank `k` and codebook bank `k`.

So the array produces 4 output rows × 16 output channels at a time, one
output column per slot. The 64 PEs all finish the same output column in the
same cycle.

## 3. One convolution pass

`fe_ctrl` runs one 3×3, stride-1 pass over 4 output rows × 16 output
channels × `w_in−2` output columns. The loops, outermost first:

1. channel group `g` (0..ngrp−1);
2. input column `x` (0..w_in, where the last value is a drain slot);
3. channel `c` within the group and kernel row `ky`: `3·gs` cycles.

All pixels of a window are streamed for one channel before the next channel
starts. The codebook changes only between groups.

**Pipeline.** Stage 0 issues the memory reads. Stage 1 drives the PEs one
cycle later. A pass takes **`ngrp·(w_in+1)·3·gs + 2` cycles** from start to
done, and the testbenches check this count exactly.

**Memory layout.** The host prepares the memories as follows.

| memory | organisation | content |
|---|---|---|
| `act_mem` (128 KB) | 8 banks × 8192 × BF16; two halves of 4 banks | Input row `y` of a layer lives in bank `y mod 4` of a half, at word `(y/4)·pitch + x·cin + c`. Four consecutive rows are thus in four different banks and are read in one cycle. The bank outputs are rotated back to PE rows. |
| `idx_mem` (36 KB) | 16 banks × 512 × 36 bit | Bank `k` (output channel `k` of the pass) holds, at word `ch0 + c`, the nine indices of input channel `c`. |
| `wgt_mem` (4 KB) | 16 banks × 128 × BF16 | Bank `k`, words `16g .. 16g+15`: the codebook of output channel `k` for channel group `g` (up to 8 groups = 512 channels). |

**Double buffer.** The host writes into the *fill* half while the PEs read
the *compute* half. `OP_SWAP` exchanges the two halves.

**Output buffer.** `out_buf` holds 64 columns × 4 rows × 16 channels of
BF16. The first group writes each pixel. Every later group adds its partial
result to the stored one, in BF16.

## 4. Auxiliary function unit (AFU)

At the end of a pass the AFU **drains** the output buffer. It takes one
value per cycle, in column, row, channel order: `wout·64 + 2` cycles. For
each value it can do two things:

- **Write-back** (`wb_en`). It applies ReLU and writes the result into the
  fill half of the activation memory. Output row `y = orow0 + r` goes to
  bank `y mod 4`, word `(y/4)·opitch + x·cout + coff + k`. The next layer
  then finds its input already in place, and one `OP_SWAP` turns the output
  of one layer into the input of the next.
- **Pooling** (`pool_en`). It adds the ReLU value into one of up to 512
  per-channel accumulators.

`OP_POOL` then multiplies each accumulator by `pscale`, a BF16 value that
the host sets to `1/(H·W)` times the quantiser step. It clamps the result to
an unsigned 4-bit feature and sends it to the HDC feature buffer, where it is
*added*. Summing the K shots of one class in the buffer is what makes
training batched: one HDC update per class instead of one per image.
`OP_CLR_FEAT` clears both the accumulators and the feature buffer.

## 5. Cyclic random projection (cRP)

Encoding multiplies the F-element feature vector by a D×F matrix of ±1. The
matrix is cut into 16×16 blocks, and block `k` is used at cycle `k` of an
encoding. Blocks are taken in HV-segment-major order:
`k = d·(F/16) + f`, where `d` is the HV segment and `f` the feature segment.

**Generating the blocks.** Row `i` of block `k` is the state of LFSR `i`
after `16·k` single shifts from its seed. The LFSR is 16 bits wide with
polynomial x¹⁶+x¹⁴+x¹³+x¹¹+1, and it is advanced 16 shifts per cycle.

- The seeds form the *base memory*.
- They are written by the host (`OP_WR_CFG` addresses 16–31). A zero seed
  is replaced by 1.
- They are reloaded at the start of every TRAIN and INFER, so training and
  inference see the same matrix.

**Encoding datapath.** Bit 1 of a block means +feature and bit 0 means
−feature. Sixteen 16-input adder trees produce 16 sums per cycle, which are
accumulated over the F/16 feature segments. The sum is shifted right by
`shift` and saturated to the class precision (§6). An encoding takes
**D·F/256 cycles**, and the HDC testbench checks this count.

## 6. Class memory and precision

The class memory is 16 banks × 8192 words × 16 bit (256 KB). Element `e` of
every HV segment lives in bank `e`. Precision P is 1, 2, 4, 8 or 16 bits,
set as `plog` = log2 P, and `16/P` segments of one class are packed into a
word:

```
word = cls·(nseg·P/16) + (seg div (16/P)),   bit offset = (seg mod (16/P))·P
```

Values are two's complement, saturated to P bits. At P = 1 the stored bit is
the sign: 0 means +1 and 1 means −1, and the encoder and updater keep only the
sign. Reads are one cycle. Writes mask the field, so a write cannot disturb
neighbouring packed segments.

What fits (`nseg = D/16`):

| D | classes at 16 bit | 8 bit | 4 bit | 1 bit |
|---|---|---|---|---|
| 4096 | 32 | 64 | 128 | 256* |
| 8192 | 16 | 32 | 64 | 128 |

\* limited by the 8-bit class id.

## 7. Training, inference and early exit

Both operations walk the `D/16` HV segments one at a time. Each segment is
first encoded, which takes `F/16` cycles. Then:

- **TRAIN `cls`, `new`.** The segment is read from the class memory, added
  to the encoded segment, saturated and written back. For the first sample
  of a class (`new`), the addition starts from zero. Latency:
  **`nseg·(nfseg+4)` cycles**.
- **INFER `blk`.**
  1. The encoded segment is compared with segment `d` of each of the `ncls`
     classes of that CONV block, one class per cycle. Block `blk` uses class
     ids `(blk−1)·ncls + j`.
  2. The L1 distances accumulate in `dist_table` (256 × 32 bit; entries
     0..127 hold running distances).
  3. The min finder scans the table. Ties go to the lower class id.
  4. The block's prediction and distance are recorded at entries
     `128+2(blk−1)` and `129+2(blk−1)`.
  5. The early-exit check runs.

  Latency: **`nseg·(nfseg+ncls+2)+ncls+3` cycles**.

**Early exit.** The host runs the CNN block by block. After each block it
pools the features and issues `INFER blk`, then continues only if the result
word says not to exit. The early-exit rule:

- Blocks before `E_s` never exit.
- From `E_s` on, a run counter starts at 1. It grows when a block predicts
  the same class as the previous block and restarts at 1 when the class
  changes.
- The chip exits when the counter reaches `E_c`, and always exits at the
  last block, `nblk`.

## 8. Chip interface

**Command word.** `{op[63:60], addr[59:36], data[35:0]}`:

| op | name | fields |
|---|---|---|
| 1 | WR_ACT | addr[14:13] bank of the fill half, addr[12:0] word, data[15:0] BF16 |
| 2 | WR_IDX | addr[12:9] bank, addr[8:0] word, data[35:0] |
| 3 | WR_WGT | addr[10:7] bank, addr[6:0] word, data[15:0] |
| 4 | WR_FEAT | addr[9:0] feature, data[7:0]: raw input that bypasses the CNN |
| 5 | WR_CFG | addr 0..7: 32-bit slice of the configuration vector; addr 16..31: PRNG seed |
| 6 | SWAP | exchange activation halves |
| 7 | RUN_FE | one convolution pass, then automatic AFU drain |
| 8 | POOL | pooled features → feature buffer (accumulating) |
| 9 | TRAIN | addr[7:0] class, data[0] new class |
| A | INFER | addr[2:0] CONV block 1..4 |
| B | CLR_FEAT | clear pooling accumulators and feature buffer |
| C | RD_OUT | addr = {col[5:0], row[1:0], ch[3:0]} of the output buffer |

**Configuration vector.** 256 bits, made of three packed structs from
`fsl_pkg`, most significant field first:

- `conv_cfg_t` at bit 0: `{w_in, gs, ngrp, row0, pitch, cin, ch0}`;
- `afu_cfg_t` at bit 64: `{orow0, opitch, cout, coff, wb_en, pool_en, pscale, npool}`;
- `hdc_cfg_t` at bit 160: `{nfseg, nseg, plog, shift, ncls, es, ec, nblk}`.

**Result words.**

- INFER: `{4'hA, 16'd0, exit, blk[2:0], pred[7:0], dist[31:0]}`
- TRAIN done: `{4'h9, 60'd0}`
- RD_OUT: `{4'hC, 44'd0, bf16}`

**Ordering.** Commands execute strictly in order. The command at the head of
the FIFO waits until:

- the unit it touches is idle;
- for commands that touch the feature buffer (WR_FEAT, TRAIN, INFER), any
  POOL in progress has finished;
- for commands that produce a result, no other result is in flight and the
  result FIFO has room.

The host can therefore stream a whole image and training sequence without
polling.

**Clock gating.** The FE and HDC clocks are gated by latch-based cells,
`clk_gate`, with an enable latched while the clock is low. A unit's clock
runs while:

- the unit is busy;
- a command for it is at the FIFO head;
- one of its single-cycle output pulses is still pending.

`test_en` forces both clocks on.

## 9. Parameters and sizes

The defaults are the published sizes:

| parameter | default | where |
|---|---|---|
| PE array | 4 × 16 | `fe_pe_array` ROWS, COLS |
| codebook entries | 16 (4-bit index) | `fsl_pkg::NCB` |
| Ch_sub | 64 (configurable 6..64 per pass) | `fsl_pkg::CHSUB`, `conv_cfg.gs` |
| activation / index / weight / class memory | 128 / 36 / 4 / 256 KB | 424 KB total |
| feature buffer | 1024 × 8 bit | `feature_buf` FMAX |
| F, D, classes | 16–1024, 16–8192, up to 256 slots | `hdc_cfg` |
| I/O FIFOs | 64 bit × 16 | `fsl_hdnn_top` FIFO_DEPTH |

**Sizes that are this design's assumptions:**

- output buffer width 64 columns;
- 512 pooling accumulators;
- 8-bit feature-buffer entries, so that K 4-bit shots can be summed;
- 256-entry distance table.

**Workloads.** For the main measured task, 10-way 5-shot with F = 512 and
D = 4096 at 16 bit, the class HVs take 80 KB. One TRAIN takes 9,216 cycles
and one INFER 11,277 cycles. The 3×3 stride-1 layers of ResNet-18 at
224×224 fit when tiled in 4-row passes: the largest input tile is 22,272
BF16 words, against 32,768 per buffer half.

## 10. Where this RTL departs from the paper or goes beyond it

- **Convolution shapes.** Only 3×3 stride-1 convolutions are sequenced. The
  ResNet-18 stem (7×7, stride 2), the stride-2 layers and the 1×1 downsample
  paths must be run by the host, as stride-1 passes followed by
  subsampling, or off-chip. The host also does padding (zero rows and
  columns in the activation memory) and tiling.
- **BF16 arithmetic.** It truncates and flushes subnormals to zero. The
  paper says only "BF16".
- **ReLU.** The placement of ReLU in the AFU, the write-back addressing and
  the pooling scale register are this design's choices.
- **LFSRs.** The LFSR polynomial, the 16-shifts-per-cycle stepping and the
  block order of the cRP matrix are not given in the paper.
- **HDC schedule.** The HDC classifier encodes a segment and then uses it.
  It does not overlap encoding of segment d+1 with the class comparisons of
  segment d. Inference is therefore slower than a fully overlapped
  schedule by about `ncls` cycles per segment.
- **Quantisation.** HV quantisation is an arithmetic right shift followed by
  saturation. The paper does not describe how encoded values are reduced
  to P bits.
- **Host protocol.** The command set, result words, configuration layout
  and ordering rules are this design's own. The paper describes a 64-bit
  FIFO link to an FPGA host but not its protocol.
- **Power gating.** Unused class-memory SRAM banks are not power-gated.
  The published chip gates them off, but plain RTL has no notion of it.
  Only the clock gating of the two units is modelled.
- **Early-exit capacity.** Early exit keeps one class set per CONV block,
  which takes 4·C·D·P bits. For 10-way with D = 4096 that is 320 KB at
  16 bit, more than the 256 KB class memory, so early exit at that size
  needs 8-bit or lower precision.
- **Not included.** I/O pads, the on-chip clock generator, the FPGA host
  and off-chip DRAM.

## 11. Simulation and verification

Every block has a testbench `tb/tb_<block>.sv`. Each one:

- checks itself against an independent model;
- has a watchdog;
- ends with `TB_RESULT checks=N failures=M`.

Run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/fsl_pkg.sv tb/tb_bf16_pkg.sv tb/tb_fsl_hdnn_top.sv --top-module tb_fsl_hdnn_top
./obj_dir/Vtb_fsl_hdnn_top
```

| testbench | what it proves |
|---|---|
| `tb_fe_pe`, `tb_fe_pe_array` | Clustered 3×3 results for every PE against real arithmetic. Role rotation over many slots. |
| `tb_act_mem`, `tb_idx_mem`, `tb_wgt_mem`, `tb_out_buf` | Bank mapping, double-buffer swap, accumulate writes, read latency. |
| `tb_afu` | Drain order, ReLU, write-back addresses, pooling and 4-bit features, drain length. |
| `tb_feature_extractor` | A 6×6×12 two-group layer end to end. All outputs compared. Pass length checked exactly. |
| `tb_feature_buf`, `tb_crp_prng`, `tb_crp_encoder`, `tb_class_mem`, `tb_hv_updater`, `tb_dist_calc`, `tb_dist_table`, `tb_min_finder`, `tb_ee_check` | Each HDC stage against a software model, at all precisions. |
| `tb_hdc_classifier` | Training (batched, new class, incremental) and inference on two CONV blocks against a bit-exact model. Early exit. Training, inference and encoding cycle counts. |
| `tb_io_fifo`, `tb_clk_gate` | Order under random backpressure. Glitch-free gating. |
| `tb_fsl_hdnn_top` | The chip at its default sizes, driven only by commands (described below). |

`tb_fsl_hdnn_top` drives the chip through a conv pass with read-back and
write-back checks. It then runs batched training from pooled features and
raw-input training, at 16 bit and at 1 bit, followed by an inference
sequence that must exit early. It counts 17 mechanisms and fails if any of
them never occurred, among them:

- swap, group accumulation, write-back, pooling;
- batched, new-class and incremental training, raw bypass;
- inference, early exit, per-unit clock gating;
- a full input FIFO, command stalls, output backpressure;
- both precisions.

**Limits of the checks.**

- BF16 results are compared with a tolerance of a few percent of the sum of
  the absolute terms, because the hardware rounds after every addition.
- The HDC path is compared bit-exactly.
- No gate-level or timing verification was done.
- `clk_gate` is a behavioural latch model, standing in for a
  library clock-gating cell.

## 12. Notes on the code

- **Package.** `fsl_pkg` holds the sizes, the configuration structs, the
  command codes and the shared BF16 and HV-packing functions.
- **Memories.** They are plain arrays with registered reads, so a memory
  compiler macro can replace them.
- **Known lint warnings:**
  - the unused high bits of the configuration vector and the command
    address;
  - the debug-only outputs `enc_acc` and `run_len`;
  - the FIFO levels, which are not brought to pins;
  - `rst_n`, used both as an asynchronous reset and in the `disable iff`
    of the FIFO's handshake assertion.
