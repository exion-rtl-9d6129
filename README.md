# EXION accelerator: RTL for an output-sparsity diffusion engine

Diffusion models make one output by running the same denoising network tens to
hundreds of times. Most of the work is in the transformer blocks, and most of
that is in the two feed-forward (FFN) matrix multiplications. EXION uses two
kinds of *output* sparsity to skip that work:

* **Inter-iteration sparsity (FFN-Reuse).** In a *dense* iteration the whole
  first FFN layer is computed. Each output element is compared with a
  threshold. The result is a bitmask that marks the elements that matter. For
  the next N *sparse* iterations, only the marked elements are recomputed. The
  others reuse the dense iteration's values. Depending on the model, 70-97 % of
  the first FFN layer's outputs are skipped.
* **Intra-iteration sparsity (eager prediction).** Before an attention score
  tile is computed exactly, a cheap log-domain estimate is made. Only the top-k
  scores of each row are kept. A row whose largest score clearly dominates is
  treated as one-hot and skipped completely.

Both mechanisms produce an unstructured bitmask over the *output* matrix, while
inputs and weights stay dense. A DPU array cannot use such sparsity directly.
**ConMerge** compacts the work in two ways:

* It drops output columns that need nothing (condensing).
* It packs the needed elements of several sparse 16-column blocks into one
  16x16 tile (merging).

The array then finishes in fewer passes. The hardware builds the merge control
itself, while the dense iteration runs.

This repository holds synthesizable SystemVerilog for one accelerator of this
kind:

* a top controller with an instruction memory;
* a DMA engine with a data aligner;
* a global scratchpad (GSC);
* a network-on-chip;
* one or more *diffusion-sparsity aware cores* (DSCs).

Every block has a self-checking testbench.

## Block map

```
exion_top
├── instmem            instruction memory, 384 x 64 bit (3 KB)
├── top_ctrl           fetch / decode / sequencing of DMA, NoC and DSC commands
├── dma                DRAM <-> GSC, 64-bit beats packed into 256-bit words
├── gsc                global scratchpad, 16384 x 256 bit (512 KB), two ports
├── noc                GSC -> DSC loads (unicast / broadcast), DSC -> GSC stores
└── dsc  (x N_DSC)
    ├── imem           2 buffers x 16 banks x 64 x 192 bit  (16 INT12 per word)
    ├── wmem           3 buffers x 16 banks x 512 x 192 bit
    ├── omem           2 buffers x 16 banks x 48 x 256 bit  (16 x 16-bit results)
    ├── sdue           16 x 16 DPUs, 16 INT12 MACs each, with cv_sw / i_sw / w_sw
    │   └── dpu
    ├── epre           eager prediction engine
    │   ├── ts_lod     two-step leading-one detectors
    │   ├── ld_dpu     log-domain DPUs with the one-hot OR adder tree
    │   └── ep_topk    top-k and one-hot selection per row
    ├── cau            ConMerge assistant unit
    │   ├── sparsity_classifier
    │   ├── sort_buffer
    │   └── cvg        ConMerge vector generator
    ├── cvmem          297 entries x 1376 bit, the merged-block descriptors
    ├── cfse           SIMD engine, 8 ALUs of 32 bit or 16 lanes of 16 bit
    │   └── cfse_alu
    ├── opmem          operand memory, 3072 x 256 bit (96 KB)
    └── shared_bus     arbitration of NoC and CFSE writes to IMEM / operand memory
```

`exion_pkg` holds the sizes, the structs (CVMEM entry, SortBuffer entry,
commands, instruction word) and the enums. `banked_mem` and `sram_2p` are the
generic memory arrays that the named memories are built from.

## One tile on the SDUE

A matrix multiplication is cut into tiles. Each tile is 16 output rows by 16
output columns:

* IMEM bank *r* holds input row *r*, 16 INT12 elements per word.
* WMEM bank *c* of each weight buffer holds weight column *c* in the same
  layout.
* An `MMUL` of length *len* streams *len* words from every bank. Every DPU does
  a 16-element dot product per cycle, so the tile's inner dimension is
  16·len (at most 1024 with the default IMEM depth).
* The 36-bit accumulators are scaled by `(acc * scale) >>> shift`, saturated to
  16 bit, and written as one 256-bit row word per lane into OMEM.

A DPU whose control map selects no weight buffer is idle. Its accumulator
enable stays low, which is the register-level form of clock gating.

IMEM is double-buffered and WMEM triple-buffered. A NoC load can fill one
buffer while an `MMUL` reads another. The three weight buffers also have a
second job: in a merged tile, the three buffers hold the weight columns of the
three blocks that were merged.

### The FFN-Reuse bitmask

With `mask_en` set, each DPU column also produces a 16-bit mask: bit *r* is
`result[r][c] > thr`. The column's weight origin index is `col_base + c`. Both
go to the CAU.

The threshold is applied to the first FFN layer's output *before* the
activation function. A threshold on the GELU output maps to a threshold on its
input, because GELU is monotonic above its minimum. That is why no
activation-function unit sits between the SDUE and the CAU.

## ConMerge in hardware

This is the least obvious part of the design.

### Sorting (sparsity-level classifier and SortBuffer)

For every column that leaves the SDUE (or the EPRE), the classifier counts the
ones in its 16-bit mask and gives it one of four classes:

| Ones in the mask | Class |
|---|---|
| 12-16 | high_dense |
| 8-11 | dense |
| 4-7 | sparse |
| 1-3 | high_sparse |

A mask with no ones is dropped. It needs no computation at all, and dropping
it is the *condensing* step.

The SortBuffer has one bank per DPU column:

* Each bank has five classes of 32 entries: the four above plus **Extra**.
* An entry is the 10-bit column origin index plus the 16-bit mask.
* If the chosen class is full, the column goes to the next sparser class. If
  that one is full too, it goes to Extra.
* If Extra is full, the entry is lost and a sticky `overflow` flag is raised.

This is a coarse sort by density that needs no comparators between entries.
When the buffer is read, the banks act as one *row* of up to 16 columns:

* The densest non-empty class is searched in the order high_dense, dense,
  sparse, extra, high_sparse.
* The sparsest is searched in the reverse order.

### Building a merged block (CVG)

A merged block has three sources, one per weight buffer:

1. The densest row becomes source 0. Its elements stay where they are.
2. The sparsest row is the candidate. Its elements land on the same (lane,
   column) cells. A cell needed by both rows is a **conflict**.
3. Conflicts are resolved one step per cycle:
   * For each column, the **degree of freedom** is computed: empty cells whose
     lane still has a free conflict-vector slot, minus conflicts. If any
     column's value is negative, the merge fails.
   * The column with the smallest degree of freedom is chosen. Its first
     conflicting lane *s* and its first usable empty lane *d* are taken.
   * Lane *d*'s conflict vector is set to *s*. From then on, lane *d*'s
     conflict line carries IMEM bank *s*, i.e. input row *s*.
   * In every column, the element that conflicts at row *s* moves to an empty
     cell of lane *d*. These moves happen in parallel.
4. When no conflicts remain, the candidate is merged. After the third source
   the block is complete and is written to CVMEM. Otherwise the next sparse row
   is tried.

A conflict-vector slot is written at most once per block.

Each CVMEM entry (1376 bits) holds three things:

* **16 conflict vectors** `{valid, src[3:0]}`: which IMEM bank drives each
  lane's conflict line.
* **256 control maps** `{wsel[1:0], isel}`, one per DPU:
  * `wsel`: 0 means the DPU is idle; 1-3 select WMEM #0-#2.
  * `isel`: 0 selects the lane's own input row; 1 selects the conflict line.
* **48 origin indices** `{valid, idx[9:0]}`: the original weight column of each
  (WMEM buffer, DPU column).

Software loads the three weight buffers with the columns that the origin
indices name. It then issues a merged `MMUL` with the entry's address. The
SDUE computes all three blocks' needed elements in a single pass.

### What the merged result looks like

A merged `MMUL` writes its 16x16 result into OMEM in the merged layout.
Element (lane *l*, column *c*) belongs to:

* original output row `isel ? cv[l].src : l`;
* original output column `origin[wsel-1][c].idx`.

Scattering these values back, and combining them with the values reused from
the dense iteration, is left to the program (through the CFSE or off chip).

## Eager prediction engine

Each INT12 operand goes through a **two-step leading-one detector**. The
detector gives the position of the leading one, clears that bit, and then
gives the position of the next one, so each magnitude becomes the sum of at
most two powers of two.

A **log-domain DPU** then forms the product of one input and one weight from
position sums alone:

* There are four position sums per product.
* Each sum *s* turns into the one-hot value `2^(2*(11-1) - s)`. Positions are
  counted from the MSB of the 11-bit magnitude.
* Because the terms are one-hot, they are combined with OR gates rather than
  adders. Equal terms therefore count once.
* The sign is the XOR of the operand signs.
* Sixteen such products are added and accumulated per cycle, with the same
  chunk timing as the SDUE.

After the last chunk, each row of the predicted 16x16 tile goes through
**top-k** (ties go to the lower index):

* A row is **one-hot** if its largest score beats the second largest by more
  than `ep_thr`. Only that element is kept.
* The selection is transposed into per-column masks, which feed the CAU in the
  same way as the FFN bitmasks do.

## CFSE and the shared bus

The CFSE applies one element-wise operation to `len` 256-bit words:

* **Operations:** `ADD, SUB, MUL, MAX, MIN, RELU, CMPGT, PASS`.
* **Element modes:** eight 32-bit elements per word, or (split mode) sixteen
  16-bit elements per word. Split mode doubles the rate.
* **Operand A:** the operand memory, or OMEM in the SDUE's row layout.
* **Operand B:** the operand memory, or a scalar.
* **Results:** go to the operand memory or, cut to INT12, straight into IMEM
  for the next `MMUL`.

IMEM writes pass the **shared bus**. The NoC has fixed priority there, because
a broadcast cannot be held for one DSC. The CFSE pipeline stalls while it is
refused.

## Top level: controller, DMA, NoC, GSC

The controller runs one instruction at a time. Each instruction is 64 bits:

| Bits | Field |
|---|---|
| [63:60] | opcode |
| [59:56] | sub-op |
| [55:48] | DSC mask |
| [47:46] | buffer select |
| [45:42] | bank |
| [31:0] | immediate |

| Opcode | Mnemonic | Effect |
|---|---|---|
| 0 | NOP | |
| 1 | SET | command register `sub` ← imm |
| 2 | DMA | sub[0]=0 DRAM→GSC, 1 GSC→DRAM; R_DRAM, R_GSC, R_LEN |
| 3 | NOC_LD | GSC→IMEM/WMEM/operand memory of the masked DSCs; sub[1:0] target, sub[3] spread over 16 banks, bsel buffer, bank, R_IADDR local address |
| 4 | NOC_ST | OMEM (sub[0]=0) or operand memory → GSC at R_GSC + d·R_LEN + i for DSC *d* |
| 5 | MMUL | sub[0] merged, sub[1] send bitmasks to CAU; bank[1:0] weight buffer, bank[3] OMEM buffer, bsel[0] IMEM buffer; R_LEN, R_IADDR, R_WADDR, R_OADDR, R_CV, R_SCALE, R_THR, R_COLB |
| 6 | EPMM | eager-prediction tile; R_TOPK = {ep_thr, k}, R_SCALE shift |
| 7 | CAUCLR | empty the SortBuffer |
| 8 | CVG | run ConMerge vector generation into CVMEM from R_CV |
| 9 | CFSE | R_CFSE = {dst, srcb, srca, split, op}, R_CA, R_CB, R_CD, R_IMM, R_LEN |
| F | HALT | |

Registers: `R_DRAM 0, R_GSC 1, R_LEN 2, R_IADDR 3, R_WADDR 4, R_OADDR 5, R_CV 6,
R_SCALE 7, R_THR 8, R_COLB 9, R_TOPK 10, R_CFSE 11, R_CA 12, R_CB 13, R_CD 14,
R_IMM 15`.

The **DMA** packs four 64-bit DRAM beats into one GSC word on loads and unpacks
them on stores. Its DRAM port is a valid/ready request channel with in-order
read responses.

The **NoC**:

* reads one GSC word per cycle and delivers it to all masked DSCs at once;
* on stores, grants the DSCs round-robin, one word per cycle.

## Timing

| Operation | Cycles |
|---|---|
| MMUL (dense), command to `done` | len + 3 |
| MMUL (merged) | len + 5 (CVMEM read first) |
| SDUE / EPRE result after last chunk | next clock edge |
| CFSE, `len` words | len + 1, plus bus-stall cycles |
| NoC load | one word per cycle, plus 1 cycle latency |
| DMA load | about 4 DRAM beats per GSC word, limited by DRAM ready/latency |
| CVG | 1 cycle per conflict move plus pops; data dependent |
| Controller fetch | 2 cycles per instruction; SET completes in decode |

At 800 MHz one DSC does 16·16·16 = 4096 INT12 multiply-accumulates per cycle.

## Parameters: paper against this RTL

| Item | Paper | RTL default |
|---|---|---|
| DPU array | 16 x 16 | 16 x 16 (`LANES`, `COLS`) |
| MMUL precision | INT12 | INT12 (`DW`) |
| IMEM / WMEM buffering | 2 / 3 | 2 / 3 |
| CVMEM | 50 KB | 297 x 1376 bit |
| Operand memory | 96 KB | 3072 x 256 bit |
| GSC | 512 KB per core figure; 64 MB in the 24-core configuration | 16384 x 256 bit = 512 KB |
| INSTMEM | 3 KB | 384 x 64 bit |
| CFSE | 32-bit ALUs, or 2 x 16 bit | 8 ALUs |
| DSCs | 4 / 24 / 42 in the evaluated configurations | `N_DSC = 1` (mask allows up to 8) |

## Where this design departs from the paper

The paper describes blocks and dataflow but no instruction set, widths or
handshakes. Everything below is a choice of this design.

* **Instruction set and sequencing.** The instruction set is this design's own.
  The controller runs strictly one operation at a time. The paper's overlap of
  EPRE with SDUE/CFSE, and of data transfer with compute, is possible with the
  double and triple buffers, but the controller does not issue operations
  concurrently.
* **Merged output layout.** Merged tiles are stored in OMEM in merged layout.
  Scattering them back to original positions is left to software.
* **Failed merges.** A failed merge closes the current block, and the rejected
  row starts the next one. The paper instead retries the same base block with
  later sparse rows.
* **SortBuffer overflow.** When the Extra class is full, the entry is dropped
  and a sticky flag is raised. The paper does not say what happens in this
  case.
* **Bitmask source.** The bitmask is compared at the SDUE output, against a
  threshold on the pre-activation value, instead of after the non-linear
  function.
* **Top-k scope.** Top-k and one-hot detection work on one 16-wide tile row,
  not on a whole attention row.
* **One-hot adder tree.** Equal one-hot terms are ORed, as the OR-gate adder
  tree implies. The paper's worked example (3 x 5) prints a sum of 13, which
  does not follow from its own terms 8, 2, 4 and 1. This RTL gives 15 (OR of
  8, 4, 2 and 1).
* **CFSE functions.** The CFSE has no exponential, division or square root.
  Softmax, layer normalisation and GELU therefore cannot be completed on chip.
  Residual additions, ReLU, max/min, scaling and comparisons can.
* **Peak throughput.** Counted from the DPU array alone, one DSC reaches
  6.55 TOPS at 800 MHz. The paper quotes 9.8 TOPS per DSC.
* **Core count.** The default build has one DSC. `N_DSC` raises it, and the
  8-bit mask field limits it to 8.
* **Not modelled.** SRAM macros are plain arrays. DRAM, clocking and pads are
  outside the RTL.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one:

* compares outputs against a model written in the testbench;
* checks cycle counts where a latency is defined;
* has a watchdog;
* ends with a line `TB_RESULT checks=<n> failures=<n>`.

Highlights:

* `tb_ts_lod` is exhaustive.
* `tb_sparsity_classifier` tries every mask.
* `tb_sort_buffer` forces spills into the next class and into Extra, and
  forces overflow.
* `tb_cvg` checks, for random SortBuffer contents, that every needed output
  element is computed exactly once by the blocks it writes.
* `tb_dsc` checks MMUL latency, stores, and CFSE writes into IMEM while the bus
  is busy.

`tb_exion_top` runs the top at its default parameters through two programs.

The first program does the following:

* DMA from a behavioural DRAM (`tb/dram_model.sv`, random ready);
* NoC loads;
* 4 dense and 32 masked `MMUL`s;
* an eager-prediction tile;
* a CFSE residual add;
* stores back to the GSC;
* a ConMerge vector generation.

The second program runs merged `MMUL`s on the CVMEM entries produced by the
first program. It compares their results element by element with the dense
reference.

The testbench counts how often each mechanism occurs and fails if any never
does. The counted mechanisms are:

* dense, merged and conflict-line tiles;
* eager prediction and one-hot rows;
* condensing;
* merges that succeed and merges that fail;
* moves;
* SortBuffer spills.

Broadcast loads and shared-bus stalls need several DSCs or concurrent traffic.
They are exercised in `tb_noc` and `tb_dsc` instead.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/exion_pkg.sv \
    tb/tb_exion_top.sv --top-module tb_exion_top -Mdir obj_top
./obj_top/Vtb_exion_top
```

Building the top takes a minute or two; the run takes seconds.
