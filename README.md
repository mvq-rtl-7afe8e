# A masked-vector-quantization CNN accelerator in SystemVerilog

Vector quantization (VQ) compresses a CNN layer. The weights are cut into short vectors of
`d` values, and each vector is replaced by the index of its nearest entry in a small shared
codebook. Masked VQ adds N:M pruning before the clustering. Inside each vector only N of every
M weights survive, and clustering is done only on the survivors. A weight vector is then stored
as two fields:

* a **codeword index** (`log2 k` bits), and
* a **mask code** (`ceil(log2 C(M,N))` bits) that says which positions survived.

With the default `k = 512`, `d = M = 16` and 4:16 pruning, the two fields take 9 + 11 = 20 bits
per 16 weights. That is 1.25 bit per weight instead of 8.

The hardware in this repository uses that format in two ways:

1. **Weights are decompressed on the way into the array, not in memory.** The on-chip L2 holds
   only codebooks and index/mask pairs. The weight loader decodes each pair as it goes. The
   index reads a codeword from a codebook register file. A look-up table expands the mask
   code, and AND gates zero the pruned elements. The weight traffic from L2 therefore shrinks
   by about 6.4×.
2. **The array multiplies only the surviving weights.** In a group of `d` output channels,
   only `Q = N/M·d = 4` of the 16 weights in a row are non-zero. So each row of a 16-channel
   tile has 4 multipliers, not 16. Each multiplier also stores which output channel its weight
   belongs to, and a demultiplexer sends its product to that channel's adder.

The array follows an *Enhanced Weight Stationary* (EWS) dataflow. Each PE keeps up to 16
weights in a small register file. Each activation is held in the array for several cycles
while the PEs step through those weights. Partial sums are accumulated in a register file
next to the array rather than in SRAM.

The default configuration is a 64×64 array: 64 input-channel rows by 64 output-channel
columns. That is 1024 physical multipliers doing the work of 4096 dense ones. The codebook
holds 512 codewords of 16 signed bytes, there is 2 MB of L2 and 256 KB of L1. All of these
are parameters.

---

## 1. Block map

```
            host ports (SoC CPU / DMA are outside this design)
               |                    |                        ^
               v                    v                        |
   +-------------------+    +--------------------------------------+
   | l2_sram  (2 MB)   |    | l1_buffer (256 KB, 64-bit banks)     |
   | codebooks +       |    |  ifmap words: 64 x int8 / pixel,grp  |
   | assignment rows   |    |  psum words : 64 x int32 / pixel,grp |
   +---------+---------+    +----+--------------------------+------+
             | 64 bit            | ifmap read               ^ psum r/w
   +---------v---------+    +----v---------+           +----+---------+
   | weight_loader     |    | ifmap_loader |           | ofmap_storer |
   |  mask_lut x4      |    |  (addresses) |           |  accumulate, |
   |  AND gates        |    +----+---------+           |  ReLU        |
   +--+-----------+----+         |                     +----^---------+
      |  index    ^ codewords    v                          |
   +--v-----------+----+    +---------+                 +---+---+
   | codebook_rf       |    |  arf    |                 |  prf  |
   | 512 x 128 b, 4 rd |    +----+----+                 +---^---+
   +-------------------+         | 64 activations           | 64 psums
      sparse weights + masks     v                          |
   ------------------------> ews_array: 4 x sparse_tile ----+
                              (each 64 x sparse_tile_row,
                               each row 4 x zg_pe + cascaded_lzc + MRF)
                                 ^
                    ews_controller (phases and EWS loop)
```

| file | what it is |
|---|---|
| `mvq_pkg.sv` | sizes, `C(M,N)` helper, the `layer_cfg_t` pass configuration |
| `lzc.sv`, `cascaded_lzc.sv` | mask encoder: Q chained leading-zero counters |
| `mask_lut.sv` | mask code → 16-bit mask, table computed at elaboration |
| `codebook_rf.sv` | codebook register file, 1 write port, L/d = 4 read ports |
| `weight_loader.sv` | codebook init; decodes assignment rows and writes them into the array |
| `zg_pe.sv` | PE with a 16-entry, 1-write/2-read weight register file and zero gating |
| `sparse_tile_row.sv` | one input channel × 16 output channels, with 4 PEs |
| `sparse_tile.sv` | 64 rows chained into one combinational column reduction |
| `ews_array.sv` | 4 tiles, the stream registers between tiles, and output de-skew |
| `arf.sv`, `prf.sv` | activation and partial-sum register files |
| `ifmap_loader.sv`, `ofmap_storer.sv` | data access controllers between L1 and the register files |
| `ews_controller.sv` | sequencer for one pass of a layer |
| `l1_buffer.sv`, `l2_sram.sv` | on-chip memories, written as arrays |
| `mvq_accel.sv` | top level |

---

## 2. Storage formats

### Codebook (L2)
Codeword `i` (16 signed bytes, element `e` in bits `[8e+7:8e]`) occupies two 64-bit L2 words,
`cb_base + 2i` (bits 63:0) and `cb_base + 2i + 1` (bits 127:64).
The weight loader copies all 512 codewords into the codebook RF in 1024 cycles. This happens
once per layer, or less often; it is selected by `cfg.cb_init`.

### Assignment rows (L2)
One row serves one array row (one input channel) and one WRF entry. It holds a field for each
of the four 16-channel groups `j`:

```
bits [20j+8  : 20j]     codeword index   (9 bits)
bits [20j+19 : 20j+9]   mask code        (11 bits)
```

The row is 80 bits, padded to two 64-bit words: `asg_base + 2n` and `asg_base + 2n + 1`.
Rows are numbered `n = h·E + e`, where `h` is the array row, `E = A·B·D` is the number of
WRF entries used, and `e` is the entry. Entry `e` holds the weight for kernel position `q`,
input-channel subset `r` and output-channel subset `s`, with `e = (q·B + r)·A + s`.

### Mask code
There are C(16,4) = 1820 masks with four ones. Code `c` means the `c`-th of them when they are
listed in increasing numeric order: code 0 is `0x000F`, code 1 is `0x0017`, and code 1819 is
`0xF000`. Codes 1820–2047 decode to an all-zero mask.

`mask_lut` builds this table at elaboration time with Gosper's next-combination step:
`c = v & -v; r = v + c; v = r | (((v ^ r) >> 2) / c)`. The table therefore needs no data file.

### L1
* **Ifmap words:** 64 signed bytes, the 64 channels of one input-channel group at one pixel.
  The layout is channel first: the word of pixel `(y, x)` and group `g` sits at
  `ifm_base + (y·IW + x)·CG + g`.
* **Psum/ofmap words:** 64 signed 32-bit values, at `ofm_base + (y·OW + x)·KG + g`.

---

## 3. From assignment row to PE register

This is the least obvious part of the design. It takes three steps.

1. **Decode (weight_loader, one cycle).** When both words of a row have arrived, the four
   indices address the four codebook read ports in the same cycle. The four mask codes go
   through four `mask_lut`s. Each codeword is ANDed with its mask. The loader sends one
   64-wide sparse weight vector, with its 64-bit mask, to array row `h` and WRF entry `e`.
   L2 reads are streamed back to back. An assignment load of `64·E` rows therefore takes
   about `128·E` cycles.

2. **Compact (sparse_tile_row, same cycle).** Inside each tile, a 16-bit slice of the mask
   enters a chain of four leading-zero counters. Stage `i` finds the highest remaining set
   bit, reports its index `pos[i]`, and clears that bit for stage `i+1`. The positions come
   out in descending order. Four multiplexers pick `weight[pos[i]]` into the four PEs' WRFs.
   The four positions are written, at the same address, into four mask register files (MRFs)
   of 4 bits each. If a mask has fewer than four ones, the unused slots receive weight 0.

3. **Compute (every cycle).** All four PEs, and their MRFs, are read at the same address. The
   MRF entry steers the PE's product through a demultiplexer onto one slot of a 16-wide psum
   line. Sixteen adders add the line to the psums from the row above. A tile chains all 64
   rows combinationally, so its output is the full 64-input dot product for its 16 output
   channels.

### Zero gating (zg_pe)
Each PE's WRF has two read ports:

* `now` gives the weight used in this cycle;
* `next` gives the weight for the following cycle.

If either the next weight or the next activation is zero, the PE sets a `zero` flag at the
clock edge. In the following cycle it feeds the multiplier from hold registers, which keep
the last non-zero operands, so the multiplier inputs do not toggle. The output is forced to 0.

The result is always exact, provided that what is presented as `next` really is the next
operand. The array guarantees this: a stage's `next` operand is the sample one register
earlier in the stream.

### The array stream and its timing (ews_array)
A compute sample consists of:

* a valid bit,
* a WRF address,
* 64 activations, and
* a 5-bit tag: `{first, s}`.

The sample enters the array through a chain of registers, one register per tile. Tile `j`
uses stage `j+1` as its current operand and stage `j` as its next operand. The output of
tile `j` is then delayed by `3−j` more registers. All 64 psums of a sample, and its tag, thus
appear together **4 cycles (= L/d) after the sample was presented**. A new sample can be
accepted every cycle.

The PRF adds the psums to row `s` of the tag. When `first` is set it overwrites that row
instead.

---

## 4. One pass of a layer (ews_controller)

The controller runs a *pass*. A pass is one subset of a layer's weights that fits in the
16-entry WRFs:

* `A` output-channel groups of 64,
* `B` input-channel groups of 64, and
* `D` consecutive kernel-plane positions starting at `q0`,

with `A·B·D ≤ 16`. Each field of `layer_cfg_t` is described in `mvq_pkg.sv`.

```
[codebook init]  -> assignment load (64·A·B·D rows)
for each ofmap pixel (row-major):
    ARF load : B·D activation vectors from L1      (B·D + 2 cycles)
    compute  : for q<D, for r<B, for s<A            (A·B·D cycles, one sample per cycle)
                 WRF entry (q·B+r)·A+s, ARF entry q·B+r, PRF row s, first = (q==0 && r==0)
    drain    : 4 cycles
    store    : A PRF rows to L1, read-modify-write if cfg.accumulate, ReLU if cfg.relu
```

An activation vector therefore stays in the PEs for `A` consecutive cycles while the weights
change. Partial sums of the `A` output groups are accumulated over `B·D` vectors in the PRF.

A whole convolution takes one or more passes. The host runs them in sequence:

* the first pass has `accumulate = 0`;
* later passes, over further kernel positions or input groups, have `accumulate = 1`;
* the last pass has `relu = 1`.

The controller counts compute cycles and stall cycles. A stall is a cycle in which the array
is idle because the ARF is loading, the array is draining or the PRF is being stored. Loading,
computing and storing are not overlapped in this design. For the test layer (A = B = 2,
D = 4) about 60% of the cycles are stalls.

---

## 5. How far this follows the source design

**Taken from the source design:**

* the compressed format (index plus N:M mask code, and a look-up table to restore the mask);
* a codebook RF with L/d read ports, and masking with AND gates in the weight loader;
* Q PEs, Q WRFs and Q MRFs per tile row;
* the cascaded LZC encoder built with XOR;
* DEMUXes steered by the MRF, the psum line and the per-channel adders;
* the zero-gated PE with a 1-write/2-read WRF;
* the EWS loop order;
* the ARF and PRF;
* all sizes: 64×64 array, d = 16, k = 512, 4:16 pruning, 8-bit codebook and activations,
  16-entry register files, 64-bit DMA width, 2 MB L2, 256 KB L1.

**Choices made here, where the source gives no detail:**

* the 32-bit psum width;
* the bit layout of assignment rows and the order of mask codes;
* the L1 word layout and the 50/50 split of L1 between ifmaps and psums;
* the inter-tile stream registers and output de-skew;
* no pipeline registers between tile rows;
* ReLU as the activation function;
* read-modify-write accumulation in L1;
* all handshakes and latencies.

**Left out or simplified:**

* **The SoC CPU, the AXI DMA, the L1/DMA interconnects and off-chip DRAM are not part of
  this design.** The loaders access L2 and L1 through direct ports. The host fills L2 and L1
  and reads results back through plain ports on the top level.
* **No convolutional reuse in the ARF.** Each pixel reloads its `B·D` activation vectors
  from L1, instead of reusing the overlap with the previous window.
* **No overlap of phases.** ARF loading and PRF storing stall the array (section 4).
  The source reports throughput that relies on better overlap, so cycle counts here are
  pessimistic.
* **No padding logic.** Ifmaps must be stored already padded. Strides 1–15 are supported.
* **One mask group per codeword (d = M).** Configurations with several N:M groups per
  codeword would need a packing of several mask codes per subvector, which is not defined here.
* **Depthwise convolutions** run only as diagonal weight matrices: 1 useful row per
  16-channel group, with a mask that still has four ones.
* The WS and dense-EWS baselines that the source compares against are not built.

---

## 6. Capacity against typical networks

Weight storage per layer is `1.25 bit × weights + 8 KB` codebook. Parameter counts are the
usual published figures for these networks.

| network | weights (conv) | compressed | largest layer | comment |
|---|---|---|---|---|
| ResNet-18 | 11.2 M | ≈1.9 MB | 2.36 M → 369 KB | whole model fits in the 2 MB L2 |
| ResNet-50 | 23.5 M | ≈4.1 MB | 2.36 M → 369 KB | runs layer by layer with L2 refills |
| VGG-16 | 14.7 M conv + 124 M FC | ≈21 MB | FC6 103 M → 16 MB | FC6 must be streamed in chunks; large early feature maps need tiling |
| AlexNet | 2.3 M conv + 59 M FC | ≈9.6 MB | FC6 38 M → 5.9 MB | conv1 (11×11, stride 4, 3 ch) uses D ≤ 16 kernel positions per pass |
| MobileNet-v1 (pointwise) | 3.2 M | ≈0.6 MB | 1 M → 160 KB | depthwise layers map poorly (section 5) |

In one pass, L1 holds at most 2048 ifmap words and 512 psum words. A 56×56 layer with 64
output channels (3136 psum words) therefore has to be split by the host into tiles of at most
512 output pixel-groups.

---

## 7. Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and ends. Run one with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_mvq_accel \
    rtl/mvq_pkg.sv tb/tb_mvq_accel.sv -o sim
./obj_dir/sim
```

`-Irtl` lets Verilator find each module in its own file, `rtl/<module>.sv`.

`tb_mvq_accel` runs the whole accelerator at its default size. It uses a 3×3 convolution with
128 input and 128 output channels on a 4×4 ifmap, split into three passes:

1. codebook init and plain store;
2. accumulate;
3. accumulate with ReLU.

It compares all 512 outputs with a reference computed from the independently decoded weights.
It checks the compute-cycle count (pixels × A·B·D per pass). It also requires that codebook
init, zero gating, stalls, L1 accumulation and ReLU clamping each occur at least once. It runs
in under a minute.

`tb_ews_array` checks the 4-cycle array latency with the full 64×64 array. `tb_weight_loader`
checks the mask-code order against its own enumeration of the 1820 masks.

To try another size, override the top's parameters: `H`, `L`, `DVEC`, `KCW`, `NKEEP`, `MGRP`,
and the memory depths. `L` must be a multiple of `DVEC`, and `MGRP` must equal `DVEC`.
