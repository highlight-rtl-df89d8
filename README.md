# HighLight: a sparse DNN accelerator for hierarchical structured sparsity

A sparse accelerator has to choose between two things. If it handles any
pattern of zeros, it pays for that in muxes, buffers and metadata on every
operation. If it supports only one fixed pattern, such as 2:4, it is cheap but
misses most of the sparsity that real networks have. HighLight takes a
middle path called *hierarchical structured sparsity* (HSS). The weight
tensor is cut into small blocks, and then into blocks of those blocks, and
each level gets its own simple G:H rule: at most G nonzeros in every H
entries. Each level needs only a small mux, so the total cost stays low. The
sparsity degrees the levels can express multiply together, so the set of
supported degrees is broad.

This repository has synthesizable SystemVerilog for the accelerator, set up
in its main configuration:

* operand A (the weights) uses two-rank HSS, C1(4:H1) -> C0(2:H0), with
  H1 in 4..8 and H0 in 2..4. Weight sparsity therefore ranges from 0%
  (4:4, 2:2) to 75% (4:8, 2:4).
* operand B (the activations) is either dense or unstructured sparse, and
  sparse B is stored compressed.
* the compute is 1024 8-bit MACs in four PE arrays. The global buffer (GLB)
  holds 256 KB of data and 64 KB of metadata, and each array has a 2 KB
  partial-sum register file.

Zeros in A are *skipped*, so they save time. A layer with C1(4:H1) ->
C0(2:H0) weights runs in (H1/4)·(H0/2) times fewer cycles than the same
layer with dense weights. Zeros in B are *gated*: the MAC sees zero operands
and does no work, which saves energy but no cycles. This keeps all PEs in
lock-step.

## The sparsity format

Take one row of A and cut it into Rank0 blocks of H0 values. Group H1 of those
blocks into a Rank1 block.

* Rank1 rule: at most 4 of the H1 Rank0 blocks are non-empty.
* Rank0 rule: each non-empty Rank0 block has at most 2 nonzeros.

A non-empty Rank0 block is therefore described by:
* two values;
* two 2-bit offsets inside the block;
* the block's 3-bit index inside its Rank1 block (its "CP", coordinate
  payload).

These 7 bits of metadata per PE are all the hardware needs to find the B
values that meet the nonzeros of A.

Compressed B has:
* the nonzero values;
* a 2-bit in-block offset per value;
* for every *set* (the B words that one processing step consumes, see below),
  its nonzero count and the end address of each of its blocks inside the
  compressed stream.

## Dataflow

The array keeps A stationary, and B streams past it.

* Each PE holds one non-empty Rank0 block of A, i.e. two values.
* A PE row has 8 PEs, or two groups of 4. Each group holds the 4 non-empty
  blocks of one Rank1 block of A, so one row holds one output row's worth of
  K = 2·H1·H0 reduction values.
* In every *processing step*, the B values for that K range of one output
  column (a set of 2·H1 blocks) are broadcast to the PEs:
  * each PE picks the block at its Rank1 index (Rank1 skipping);
  * each of its two MACs picks the word at its Rank0 offset (Rank0
    skipping).
* The 16 products of a row are summed along the row into one partial sum per
  row per step. The sum is added into the register file at column n0.
* The four arrays hold four different 16-row slices of A and share the same
  B broadcast. One step therefore produces 64 output partial sums.

Loop nest, outermost first:

| loop | meaning |
|------|---------|
| m2   | 64-row slice of A (4 arrays x 16 rows) |
| n2   | group of n0 <= 32 output columns (one register-file tile) |
| k2   | K tile of 2·H1·H0 values: load a new A tile (16 cycles), then n0 steps |
| n0   | one processing step per cycle |

After the last k2 tile of an (m2, n2) pair, the register files drain one
column per cycle. Each column goes through the activation units (ReLU, then
an arithmetic right shift and saturation to 8 bits) and into the compression
unit. Every cycle of the drain therefore emits one compressed 64-value output
column on the `out_*` ports, in the same format as compressed B. That is what
lets the next layer consume it.

## The variable fetch unit (VFMU): the hard part

Each processing step consumes a different number of B words:
* with dense B it is 2·H1·H0, which is anywhere from 16 to 64;
* with compressed B it is the set's nonzero count.

The GLB, however, can only deliver aligned 64-word rows. The VFMU bridges
the two:

* **Buffer.** It is a 128-word circular buffer, i.e. two full sets or
  2·Hmax Rank1 blocks per group. Each word stores its value and its 2-bit
  offset.
* **Read pointer.** It advances by the current set's length on every step.
  This is the *shift* of the unit.
* **Fetch rule.** After taking the current step into account, a new GLB row
  is fetched only if the words left in the buffer are fewer than the next
  set needs. Otherwise the fetch is skipped. This lets the buffer run ahead
  and keeps the GLB idle whenever it can be.
* **Expansion.** Each set is expanded into a fixed window of 16 blocks x 4
  slots:
  * dense B: the words go straight into their slots;
  * compressed B: block b holds stream words end[b-1] .. end[b]-1, each word
    is placed at its stored offset, and any slot with no word is marked
    invalid. An invalid slot is what gates a MAC.

A GLB row fetched during step k is usable in step k+1. A layer therefore
stalls exactly once per m2 pass, for the first fill, and never again: the
rule above always fetches one step ahead, and a set never exceeds one GLB
row. The end-to-end testbench checks this and the exact cycle count:

    cycles = m2 · (n2 · (k2 · (16 + n0) + n0) + 1)

The unit test replays this four-step sequence:

| step | set count | shift | valid entries left | fetch |
|------|-----------|-------|--------------------|-------|
| 0 | 8  | 0  | –  | row 0 |
| 1 | 11 | 8  | 8  | row 1 |
| 2 | 8  | 11 | 13 | none  |
| 3 | 7  | 8  | 5  | row 2 |

In this sequence, 16-word rows meet sets of 8, 11, 8 and 7 words.

## Module map

| module | role |
|--------|------|
| `hl_pkg` | sizes, the layer configuration struct `hl_cfg_t`, the counter struct `hl_perf_t` |
| `hl_glb` | one GLB partition: a register array, one write port, combinational read ports |
| `hl_vfmu` | variable fetch management unit (above) |
| `hl_mac` | 8x8 multiply, 32-bit add, operand isolation when the B word is absent |
| `hl_pe` | stationary A block, Rank1 block select, Rank0 word select, two chained MACs |
| `hl_pe_array` | 16 x 8 PEs; row-wise reduction; active/gated MAC counts |
| `hl_rf` | 16 x 32 partial sums; overwrite on the first K tile, add afterwards |
| `hl_act` | ReLU, right shift, saturate to 8 bits |
| `hl_compress` | packs a 64-value column into nonzeros, offsets, count and block end addresses |
| `hl_ctrl` | IDLE / LOAD / STEP / DRAIN / DONE sequencer of the loop nest, GLB address generation |
| `highlight_top` | wires everything; its header documents the GLB layout that software must produce |

## Using the top

1. Fill the GLB through `glb_data_*` (64-byte rows) and `glb_meta_*`
   (16-byte rows) in the layout described in the header of
   `rtl/highlight_top.sv`.
2. Set `cfg`: H1, H0, dense/compressed B, the loop counts `m2_cnt`,
   `n2_cnt`, `k2_cnt` and `n0`, the output shift, and five base row
   addresses.
3. Pulse `start`.
4. Collect the compressed output columns while `out_valid` is high. `done`
   rises at the end and stays high until the next `start`.

`perf` counts cycles, steps, stall cycles, GLB fetches, skipped fetches, MAC
activity and A tile loads.

K must be a multiple of 2·H1·H0: pad A with zero blocks. M must be a
multiple of 64. A layer larger than the GLB is run as several independent
runs. Each run covers a slice of M and of N with the whole of K, and the
host refills the GLB between runs. Splitting K across runs is not possible,
because the register file is overwritten by the first K tile of each run.

## Simulation

Every block has a self-checking testbench in `tb/`. For example:

    verilator --binary --timing --assert -Irtl rtl/hl_pkg.sv tb/tb_highlight_top.sv --top-module tb_highlight_top
    ./obj_dir/Vtb_highlight_top

Each testbench prints `TB_RESULT checks=N failures=M`.

`tb_highlight_top` runs the top at its default size. It runs four layers:
* C1(4:8)->C0(2:4) with dense B;
* C1(4:5)->C0(2:3) with compressed B;
* dense A with very sparse compressed B;
* C1(4:6)->C0(2:4) with a full 32-column tile.

For each layer it checks:
* every output value against a reference matrix product;
* the step count, the A-load count and the exact cycle count;
* that stalls happen only on the first fill.

It also fails if any mechanism never occurs: Rank1 skipping, Rank0 skipping,
gating, fetch skipping, the first-fill stall, buffer wrap-around,
accumulation over several K tiles, VFMU flush between m2 passes, and zero
removal in compression. It compiles in about 30 s and runs in under a
second.

## Where this RTL departs from, or goes beyond, the description it follows

* **PE array shape.** The accelerator is described as having 1024 MACs in
  four arrays, with the array drawn as "16x16". Here each array is 16 rows x
  8 PEs x 2 MACs, which gives 256 MACs per array and 1024 in total; each PE
  holds the two values of one Rank0 block.
* **Widths.** 8-bit signed data and 32-bit accumulation are this design's
  choice.
* **Activation function and requantisation.** The activation function is
  only named in the description. ReLU plus a configurable shift with
  saturation is this design's choice.
* **Compressed output.** The output format uses 4-value blocks regardless
  of the next layer's H0.
* **Writing outputs back.** Outputs leave on ports and are not written back
  into the GLB.
* **VFMU structure.** The VFMU expands a whole set into a window, and each
  PE selects its block from that window. The original draws per-PE
  start/end address muxes. The function is the same, but the structure is
  different.
* **Worked example with conflicting offsets.** In the worked example used
  for the VFMU unit test, one block's printed offsets (1,2) disagree with
  the indices of its values, which imply (0,1). The test follows the
  indices.
* **A loading.** A tiles are loaded one row per cycle, and loading is not
  overlapped with compute (no double buffering). For small n0 this costs
  16 of every 16+n0 cycles.
* **GLB reads.** The GLB is a register array with combinational reads, not
  a compiled SRAM macro.
* **Not built.** The off-chip DRAM and the tiling loops above the GLB are
  not built; the host does that work through the GLB fill ports.
* **Extra counters.** The performance counters are an addition.

### Capacity limits

The metadata partition limits the size of a single run:
* A takes two metadata rows per tile row;
* compressed B takes one metadata row per set.

Two consequences:
* A 1024x1024x1024 matrix product with 75% sparse A and 50% sparse B runs
  as about 50 GLB-sized pieces.
* With dense A (4:4, 2:2), layers with K above 4080 exceed the 255-tile K
  counter. The same happens for layers whose 64-row A slice alone overflows
  the metadata partition, e.g. the 3x3 layers of the last ResNet-50 stage
  (K = 4608) at 50% weight sparsity. Such layers need a host-side split of K
  with external accumulation.
