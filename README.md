# Panacea AQS-GEMM accelerator in SystemVerilog

Panacea is a DNN inference accelerator whose matrix multiplier works on 4-bit *slices*
of its operands and skips slices that carry no information. Earlier bit-slice
accelerators get most of their savings from activation slices that are zero. That works
only for *symmetric* activation quantization. Asymmetric quantization is more accurate for
activations after GELU, softmax or LayerNorm. There the high-order slices cluster around
the zero point instead of zero, so nothing is sparse. Panacea's answer is the
*asymmetrically quantized bit-slice GEMM* (AQS-GEMM). It compresses the high-order
activation slices that equal one frequent value `r`, not zero, and puts back their
contribution exactly with a cheap correction term.

This RTL implements the accelerator in its main configuration:
- 7-bit symmetric weights and 8-bit asymmetric activations;
- a core of 16 processing element arrays (PEAs) holding 3072 4b×4b multipliers;
- a five-stage post-processing unit (PPU) that writes the next layer's activations
  already sliced and compressed;
- three 64 KB on-chip memories;
- a controller that runs one GEMM layer `Y = f(W·X + b)` from start to done.

Everything is synthesizable SystemVerilog with the paper's sizes as parameter defaults.

## 1. Arithmetic

### 1.1 Slices

**Weights.** A weight `w` (signed, −64..63) is split by the *signed bit-slice
representation*:

    s  = (w < 0)
    HO = (w >>> 3) + s          signed 4-bit, weight 2^3
    LO = (w & 7) - 8*s          signed 4-bit
    w  = 8*HO + LO

With this rule, every weight in −8..7 has `HO = 0`. Small weights are the common case,
so many weight HO slices are zero.

**Activations.** An activation `x` (unsigned, 0..255) is split by *distribution-based
slicing* (DBS). Each layer picks a LO-slice width `l` of 4, 5 or 6 bits (DBS types 1, 2
and 3; `dbs_sh = l-4`):

    HO = x[7:l]   padded with zeros on the right to 4 bits     weight 2^4
    LO = x[l-1:l-4]                                            weight 2^(l-4)

Types 2 and 3 drop the lowest one or two bits of `x`. In exchange, the HO slice is the
same for a range of 32 or 64 values instead of 16. For a narrow activation distribution,
that makes most HO slices equal to one value.

Every product of a weight slice and an activation slice is a 4b×4b signed-by-unsigned
multiply. The shift that puts it back in place depends only on the slice kinds and the
DBS type:

| product      | shift        |
|--------------|--------------|
| W_HO × x_HO  | 7            |
| W_LO × x_HO  | 4            |
| W_HO × x_LO  | 3 + (l−4)    |
| W_LO × x_LO  | l−4          |

### 1.2 Vectors, compression and run lengths

Slices are grouped into vectors of four:
- a weight vector is 4 rows × 1 reduction index `k`;
- an activation vector is 1 `k` × 4 columns.

A vector is **compressed** (not stored, not moved, not multiplied) when it is one of:
- a weight HO vector whose four slices are all 0;
- an activation HO vector whose four slices all equal the layer's frequent value `r`.

The stored vectors of one 32-long segment of `k` form a list of entries `{rle, vec}`. The
4-bit `rle` counts the compressed vectors skipped before this one. A run cannot exceed
15. When a 16th compressed vector follows, it is stored anyway (with `rle = 15`). This
stays exact: storing a compressible vector only means the arithmetic below treats it as
an ordinary vector. LO vectors are always stored densely.

### 1.3 The correction term

Let `U` be the set of `k` whose activation HO vector was kept. For one output:

    Σ_k w·x  =  Σ_k w·(16·x_HO + 2^(l-4)·x_LO)
             =  Σ_{k∈U} w·16·x_HO  +  Σ_k w·2^(l-4)·x_LO  +  16·r·Σ_{k∉U} w
             =  psum  −  16·r·cs  +  16·r·Σ_k w

with:
- `psum`: everything the multipliers compute, skipping the compressed HO vectors;
- `cs = Σ_{k∈U} w`: the **compensation sum**, accumulated on the side;
- `16·r·Σ_k w`: a per-row constant that can be computed ahead of time.

The asymmetric zero-point term `−zp·Σ_k w` is also a per-row constant. Both constants
are folded into the bias, so the hardware's job is

    y = psum + bias − 16·r·cs ,     bias = b + 16·r·Σ_k w − zp·Σ_k w .

The compensation sum needs no extra memory traffic. The compensators take `8·W_HO + W_LO`
from the same weight vectors that the `W_LO × x_HO` products read, and those products
run exactly for `k ∈ U`.

### 1.4 Zero-point manipulation

The PPU writes each layer's output with a zero point moved to the middle of an HO bin:

    zp' = 2^l · floor(zp / 2^l) + 2^(l-1)

The next layer's frequent slice is then `r'' = HO(zp')`. Values within ±2^(l−1) of the
zero point then all share the HO slice `r''` and compress. The host chooses `zp'`, `l`
and `r''` per layer (`ppu.zp`, `ppu.nl_sh`, `ppu.nr`).

## 2. The AQS-GEMM core

### 2.1 Tiling (output stationary)

The loop nest has three outer loops: `m` over TM = 64 output rows (128 under double-tile
processing), `n` over TN = 64 columns, and `k` over TK = 32 reduction steps. Inside
them, `a` runs over the R = 16 activation sub-tiles of 4 columns.

For every `(m, n, k)`:
- One TK×TN activation tile goes into the **global activation buffer**. An index decoder
  per lane turns the run-length stream back into a mask of kept HO vectors.
- Every PEA `p` receives its own 4×TK weight sub-tile (rows `4p..4p+3`), or two under
  double-tile processing.
- The **PE controller** then broadcasts sub-tile `a = 0..15` to all 16 PEAs, starts them
  together, and waits until all have finished.
- It adds each PEA's 4×4 partial sums and 4 compensation sums into the **global
  partial-sum buffer**. The first K tile overwrites instead of adding.

The partial-sum buffer holds 2TM × TN × 48 bit = 48 KB, the size the paper gives. The
compensation sums sit in a second array beside it (2TM × TN/4 × 32 bit).

### 2.2 Inside a PEA

Each PEA holds:
- a weight buffer with the HO and LO vectors of one or two sub-tiles;
- a weight index buffer (one 32-bit mask of kept HO vectors per sub-tile);
- a workload scheduler;
- 12 outer-product calculators (OPCs), each 16 multipliers forming a 4×4 block of 8-bit
  products;
- two shift-and-accumulators (S-ACCs), one per weight sub-tile;
- two compensators (CSs).

For one activation sub-tile, the jobs of weight sub-tile `t` are four sets over `k`:

| job         | which k                         | operators                  |
|-------------|---------------------------------|----------------------------|
| W_HO × x_HO | kept weight HO and kept x HO    | dynamic (4 DWOs)           |
| W_LO × x_HO | kept x HO                       | dynamic                    |
| W_HO × x_LO | kept weight HO                  | dynamic                    |
| W_LO × x_LO | all 32                          | static (8 SWOs)            |

Each cycle, the scheduler gives the eight static-weight operators (SWOs) the eight lowest
pending `W_LO × x_LO` jobs. It gives the four dynamic-weight operators (DWOs) the four
lowest pending jobs of the other three kinds. Without sparsity a sub-tile needs
⌈96/4⌉ = 24 cycles on the DWOs against 4 on the SWOs. With typical sparsity the dynamic
work shrinks towards the 4-cycle dense floor.

**Double-tile processing (DTP)** fills that floor. The PEA holds two weight sub-tiles
(rows of two M tiles). The SWOs work through both sub-tiles' dense jobs. Whenever fewer
than four dynamic jobs are left, the idle DWOs take `W_LO × x_LO` jobs of the second
sub-tile, from the top of `k` downwards.

The S-ACC shifts each product block by the amount in §1.1 and adds it to sixteen 48-bit
sums (the local partial-sum buffer). The CS adds `8·W_HO + W_LO` to four 32-bit sums
(the CSBUF) on every `W_LO × x_HO` job.

Timing of one sub-tile:
- `start` (1 cycle) clears the accumulators;
- then one issue per cycle;
- `done` arrives one cycle after the last issue;
- the core adds one start cycle and one write-back cycle per sub-tile.

### 2.3 Post-processing unit

The PPU has five registered stages and accepts one 1×4 output vector per cycle:

1. `m = cs·r`
2. `y = sat32(psum + bias − 16·m)`
3. piecewise-linear nonlinear function. It has 8 segments and 7 ascending breakpoints:
   `f = ((y·slope[s]) >>> sh) + icpt[s]`, saturated to 32 bits. Identity, ReLU,
   clamped/leaky shapes and GELU-like approximations are all programmable.
4. requantize to uint8: `q = clip(((f·qmul + 2^(qsh−1)) >>> qsh) + zp', 0, 255)`,
   then slice with the next layer's DBS type.
5. compress: an HO vector equal to `{r'',r'',r'',r''}` is dropped, subject to the
   15-run limit. It keeps a run counter and an entry counter per 32-row segment.

The outputs go to OMEM in the same block format that AMEM uses (below). A layer's output
block can therefore be copied unchanged into AMEM as the next layer's input.

## 3. Memories and data format

WMEM, AMEM and OMEM are 64 KB each. Each is two banks of 512 words × 16 lanes × 32 bit:
the LO bank holds word addresses with bit 5 = 0, the HO bank those with bit 5 = 1.

One **block** is 64 logical words and holds one TK = 32 segment of 16 lanes:

| words   | lane content                                                      |
|---------|-------------------------------------------------------------------|
| 0..31   | bits 15:0 = LO vector at k (slice i in bits 4i+3:4i)              |
| 31      | additionally bits 21:16 = number of HO entries of this lane       |
| 32..63  | HO entries in order: bits 19:16 = rle, bits 15:0 = HO vector      |

Only the first `count` HO entries of a lane are read. The controller reads word 31
first, then words `k` and `32+k` of both banks together, 34 cycles per block. HO entries
beyond the count are never moved. Compression saves memory traffic and multiplications,
not capacity: every block keeps all 64 slots.

Layouts (`KT = k_tiles`, `NT = 2` under DTP, otherwise 1):

| data        | block index                                                            | lane `ℓ` holds                        |
|-------------|------------------------------------------------------------------------|---------------------------------------|
| weights     | `w_base/64 + (m·KT + k)·NT + t`                                        | rows `m·NT·64 + t·64 + 4ℓ .. +3`      |
| activations | `a_base/64 + n·KT + k`                                                 | columns `n·64 + 4ℓ .. +3`             |
| bias        | WMEM word `b_base + row/16`, lane `row mod 16`, signed 32 bit          | —                                     |
| outputs     | `o_base/64 + n·KTo + row/32`, `KTo = m_tiles·NT·2`; word = row mod 32  | column group `ℓ`                      |

The output matrix is stored transposed relative to the input: output rows become the
next layer's `k`. That is what makes the chaining above work.

## 4. Using the top level

`panacea_top` has no parameters to set. The host:

1. writes WMEM and AMEM through the memory port while `busy` is low:
   - `mem_sel` 0/1/2 selects WMEM/AMEM/OMEM;
   - `mem_addr` is a logical word address;
   - `mem_lane` gives per-lane write enables;
   - reads return one cycle after `mem_re`.
2. sets `cfg` (`layer_cfg_t` in `panacea_pkg`):
   - tile counts, `dtp`, `dbs_sh`, memory bases;
   - the PPU fields `r`, PWL table, `qmul`, `qsh`, `zp`, `nl_sh`, `nr`.
3. pulses `start` and waits for `done`.
4. reads OMEM, or copies it into AMEM for the next layer.

Layer dimensions must be multiples of 64 rows (128 with DTP), 64 columns and 32 in `k`.
All blocks of a layer must be resident at once, because there is no DMA. With the
fixed-slot blocks this limits one pass to:
- 16 weight blocks (including the bias words);
- 16 activation blocks;
- 16 output blocks.

So `K ≤ 480` per pass. `M` and `N` can be split into several passes by the host; `K`
cannot, because the partial sums are finalized by the PPU.

Statistics outputs:
- `st_cycles`, `st_load_cycles`, `st_run_cycles` and `st_drain_cycles` cover the last
  layer;
- `st_compute_cycles` is cumulative since reset;
- `st_ema_words` counts lane-words moved into the core.

Event outputs: `ev_dtp_help` (a DWO ran a dense job this cycle) and `ev_sat` (the
quantizer clipped a value).

Example, from the end-to-end test: a layer with M = 128, N = 128, K = 64 and DTP takes
5384 cycles. Of these, 272 are loading, 1000 computing and 4112 draining; the drain
writes one output vector per cycle.

## 5. Where this design departs from the paper

- **Only the main precision is built:** 7-bit weights in two slices. The paper also
  evaluates 10-bit weights in three slices; those are not supported, and the weight
  buffer is 256 B per PEA, not the 384 B a third slice would need. 4-bit weights
  (−8..7) need no mode of their own: their HO slices are all zero and compressed. The
  15-run limit still stores every 16th HO vector.
- **No overlap:** tiles are loaded, computed and drained one after another. The paper
  does not describe this sequencing. Its chip also has a DMA, an AXI bus and a control
  processor to stream tiles from DRAM. Here a plain memory port and a configuration
  struct replace them.
- **Lock-step PEAs:** the 16 PEAs work in lock-step per activation sub-tile, so the
  slowest PEA sets the pace. The whole 32×4 activation sub-tile is broadcast to all PEAs.
- **Own formats:** the memory word format, the block layout, the 15-run limit, the
  restart of runs at every 32-segment, the PWL format and the requantizer formula are
  this design's own. The paper names these stages but gives no formats.
- **Bias location:** the bias and the two precomputed constants of §1.3 live in WMEM.
- **Sizes from printed capacities:** the 48-bit partial sums and 32-bit compensation
  sums are read off the buffer capacities in the paper (192 B local partial sums, 32 B
  CSBUF, 48 KB global buffer).

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each compares against integer
models written independently in `tb/tb_ref_pkg.sv` (slicing, run-length encoding) and in
the testbench itself, and ends with a `TB_RESULT checks=N failures=M` line.

| testbench          | what it establishes                                                                 |
|--------------------|-------------------------------------------------------------------------------------|
| `tb_opc`           | all signed×unsigned slice products                                                  |
| `tb_idxd`          | run-length decoding incl. forced breaks and empty segments                          |
| `tb_wsched`        | every job issued exactly once, to a legal operator, in the modelled number of cycles |
| `tb_sacc`, `tb_cs` | shift-accumulate and compensation sums                                              |
| `tb_pea`           | exact 4×4 partial sums, compensation sums and cycle counts, all DBS types, DTP on/off |
| `tb_aqs_core`      | full 16-PEA core over two K tiles, every partial sum of a 128×64 tile               |
| `tb_ppu_pwl`, `tb_ppu` | the nonlinear function and the five-stage PPU incl. saturation and run breaks   |
| `tb_sram`          | the lane-masked memory                                                              |
| `tb_panacea_top`   | three chained layers at full size, outputs decoded from OMEM and compared           |

`tb_panacea_top` runs three layers through the host port:
- DBS types 1, 2 and 3;
- DTP on and off;
- several M, N and K tiles;
- each layer's OMEM copied into AMEM as the next layer's input.

It checks every output value, every per-segment entry count and the number of words
moved. It also counts each mechanism and fails if one never happens: compressed weight
and activation vectors, forced run breaks on input and output, compressed outputs, DTP
hand-over, all DBS types, multi-tile loops, quantizer saturation, more than one PWL
segment, and layer chaining.

To run one testbench with Verilator 5 (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/panacea_pkg.sv tb/tb_ref_pkg.sv tb/tb_panacea_top.sv \
        --top-module tb_panacea_top -o sim
    ./obj_dir/sim

The full-size end-to-end test builds in about a minute and runs in seconds.

## 7. Files

| file                   | content                                                          |
|------------------------|------------------------------------------------------------------|
| `rtl/panacea_pkg.sv`   | sizes, slice and job types, configuration structs, shift table   |
| `rtl/opc.sv`           | 4×4 outer-product calculator                                     |
| `rtl/idxd.sv`          | run-length index decoder                                         |
| `rtl/wsched.sv`        | PEA workload scheduler with DTP                                  |
| `rtl/sacc.sv`          | shift-and-accumulator                                            |
| `rtl/cs.sv`            | compensator                                                      |
| `rtl/pea.sv`           | processing element array                                         |
| `rtl/aqs_core.sv`      | 16 PEAs, global buffers, PE controller                           |
| `rtl/ppu_pwl.sv`       | piecewise-linear function                                        |
| `rtl/ppu.sv`           | post-processing unit                                             |
| `rtl/sram.sv`          | lane-masked single-port-read, single-port-write memory           |
| `rtl/panacea_ctrl.sv`  | layer controller (tile loops, loading, draining)                 |
| `rtl/panacea_top.sv`   | memories, memory manager, and the blocks above                   |
