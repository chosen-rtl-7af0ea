# A multi-kernel, multi-bank Vision Transformer accelerator in SystemVerilog

A Vision Transformer (ViT) spends most of its time in large matrix products. The rest goes to a
few row-wise non-linear functions: softmax over attention scores, LayerNorm over token vectors,
and GELU in the MLP. On an FPGA card with several DDR banks, the limit is seldom the multipliers.
It is keeping every bank streaming full bursts while every compute kernel has work.

This design answers that with two ideas:

1. **Identical kernels, one per bank.** Each kernel holds a 1D array of processing elements
   (PEs) for matrix products, plus a small processing unit for the approximated non-linear
   functions and the residual (skip-path) addition. All kernels run the same operation at the
   same time.
2. **A static schedule per operation type.** Every matrix is stored split column-wise over the
   BN = 4 banks, one column part per bank. For each operation, a fixed pattern decides which
   kernel reads which bank part in which round. The patterns are chosen so that every bank
   serves one kernel per round and every read is a long burst of consecutive 512-bit words.

The RTL is parameterised with the DeiT-B build as its defaults:

| Parameter | Value | Meaning |
|---|---|---|
| Pn | 102 | PEs per kernel |
| Pm | 16 | compute units per PE |
| Tn | 212 | rows per A tile |
| Tm | 3072 | C columns per tile |
| BN | 4 | DDR banks, and therefore kernels |
| LoP | 16 | lanes of each non-linear unit |

## Data format and memory layout

- **Elements.** Every element is a signed 16-bit fixed-point number, Q8.8 (`chosen_pkg::FRAC`).
- **Words.** A memory word is one 512-bit AXI beat. It holds Pm = floor(512 / (2·16)) = 16
  elements. Each element sits sign-extended in a 32-bit lane, so every beat carries exactly
  Pm elements and a PE's Pm compute units take one beat per cycle.
- **Banks.** A W-column matrix is split into BN column parts. Bank b holds columns
  [b·W/BN, (b+1)·W/BN) of every row. The rows of a part are stored one after another with a
  programmable stride. A row part of w beats is therefore one burst of w consecutive words.
- **Attention rows.** A softmax row part holds ceil(Nh/BN) head slices back to back. DeiT-B
  has 12 heads, so each bank holds 3 slices.

## The computing kernel (`computing_kernel`)

### Matrix products: `pe_array`, `pe`, `a_tile_buffer`

C = A × B is computed one A tile at a time. An A tile is up to Tn rows by k columns; a C tile is
up to Tn rows by Tm columns.

- **Tile storage.** Row r of the tile belongs to PE r mod Pn, in its slot r div Pn. Each PE
  keeps the accumulators for all its rows, across all Tm/Pm beats of a C row.
- **One k step.** Column j of A (Tn scalars) is handed out to the PEs at one element per cycle.
  Row j of B then streams past all PEs as Tm/Pm beats. In each cycle, every PE multiplies its A
  scalar by the current B beat and adds the product to one accumulator row.
- **Overlap.** The A registers are ping-ponged, so column j+1 is handed out while column j is
  still in use. The overlap is complete only if handing out a column takes fewer cycles than
  streaming a B row, which is exactly the constraint Pn < Tm/Pm; with a smaller tile width the
  array simply waits for the A column.
- **Cost.** A tile takes k · ceil(Tn/Pn) · Tm/Pm MAC cycles when B keeps up. This matches the
  cost model Tn·Tm·k / (Pn·Pm) when Pn divides Tn. The testbenches count these cycles.
- **Drain.** The accumulators are 32 bits wide. When the tile is done, they are shifted right
  by 8 and saturated to Q8.8, then leave row by row.
- **A tile buffer.** The A tile sits in `a_tile_buffer`, which is split into BN sub-memories,
  one per source bank. All four banks' parts of an A row are written in the same cycle.

### Non-linear functions

All non-linear functions use approximations that need no divider. Each unit has LoP = 16 lanes.

- **`gelu_unit`** is piecewise linear with 16 segments of width 0.5 on [-4, 4).
  - The 17 breakpoints are GELU(-4 + 0.5·i), rounded to Q8.8.
  - Interpolation is one multiply and a shift, because the segment width is a power of two.
  - Below -4 the output is 0; from 4 upward it is x.
- **`softmax_unit`** buffers a slice of up to 13 beats (13·16 = 208 ≥ 197 tokens) and works
  in five steps:
  1. Take the maximum of the slice.
  2. Write each exponent as e^(x−max) = 2^−(q+f), where q is an integer (a shift).
  3. Compute 2^−f = e^−(f·ln 2) with the Padé form (2−r)/(2+r).
  4. Form all reciprocals, for the Padé denominators and for the sum, the same way: a
     leading-one search gives the power of two, a chord 1.5 − m/2 gives a first guess on the
     mantissa, and two Newton steps refine it. This uses only multiplies and shifts.
  5. Normalise with a single multiply per element.
- **`layernorm_unit`** takes a whole row of up to 48 beats (768 elements) and works in four
  steps:
  1. Accumulate the exact integers S = Σx and Q = Σx² over the D elements.
  2. Compute the variance scaled by D², V = D·Q − S². This avoids the division needed for a
     mean.
  3. Compute 1/√V with the same bit-manipulation approach: the leading-one position halves
     into a power of two, an odd exponent uses a stored 2^−½, and a chord plus two Newton
     steps refine the mantissa.
  4. Output (D·x − S)/√V.

  The affine γ/β of LayerNorm is assumed to be folded into the following layer's weights.
- **`residual_add_unit`** takes a row's skip-path beats first, then the main-path beats, and
  outputs the saturated sum.

Only the unit selected by the current operation is active. `computing_kernel` routes its single
input stream and single output stream to that unit.

## The schedules (`controller`, `bank_xbar`)

This is the heart of the design. The `controller` runs one operation at a time. For each
operation, it issues one burst per bank per round. `bank_xbar` routes bank k's read data to
kernel (k − rot) mod BN, or in broadcast mode to every kernel's A port. Below, round and row
numbers count from 0.

| Operation | Round structure | Bank ↔ kernel |
|---|---|---|
| GELU (row-wise, outside the heads) | round r reads row r from every bank | kernel k ↔ bank k |
| Softmax (head-wise) | each row is read ceil(Nh/BN) times, once per head slice of the bank's part (3 rounds for 12 heads) | kernel k ↔ bank k |
| LayerNorm (needs a whole row) | rows are taken BN at a time. In round c = 0..BN−1, kernel k reads the part of row k held by bank (k + c) mod BN. | rotated by c |
| Skip add | per row, the skip part, then the main part | kernel k ↔ bank k |
| Matrix product | A phase: each A row's BN parts are read and broadcast to all kernels. B phase: for j = 0..k−1, bank k sends row j of its B part to kernel k. Each kernel writes its C column part to its own bank. | broadcast, then direct |
| Head-wise product (e.g. Q·Kᵀ per head) | as above, but kernel k takes the A rows of one head slice from its own bank only; one schedule entry per head slice | direct |

Some details matter for correctness:

- **LayerNorm rotation.** Every bank is busy in every round, yet each kernel sees its row's
  parts in a fixed order. The number of rows of a LayerNorm job must be a multiple of BN; the schedule
  pads otherwise.
- **Rotated writes.** LayerNorm results are written back in rounds, with the same rotation as
  the reads (`wr_rot`, `wr_open`).
- **Round ordering.** A round waits for the previous one to drain only where the routing
  changes: between LayerNorm rounds, and between the A and B phases of a product. Otherwise
  requests run ahead, and the banks' read queues hide their latency.
- **Head-wise products.** The heads of a row are spread over the banks with the columns, so
  bank k holds the heads of kernel k. This gives ceil(heads / kernels) rounds of work per
  kernel, the figure the cost model uses for head-wise products. The A row of a head must fit
  one A-buffer sub-memory: k ≤ KMAX/BN, i.e. 768 at the defaults, against a head width of 64.
  The head's second operand (a slice of Kᵀ, or V) must be stored in the same bank.
- **Outstanding beats.** The controller counts outstanding read beats per bank (`rd_beat`) and
  written beats per bank (`wr_beat`). An operation ends when every bank has received all of its
  result words.

### The operation list

The host writes `instr_t` entries into the controller's 64-entry program memory
(`prog_we/prog_addr/prog_data`), ends the list with `OP_END`, and pulses `start`. `done` pulses
when the list has run. Each entry holds:

- `k.op`: the operation (`OP_MATMUL`, `OP_HMATMUL`, `OP_GELU`, `OP_SOFTMAX`, `OP_LAYERNORM`,
  `OP_ADD`).
- `k.n_rows`: the rows of the job.
- `k.words`: the beats per bank part of a row. For softmax it is the beats per slice.
- `k.a_words`, `k.k_dim`: the beats of an A row part and the shared dimension (matrix product
  only).
- `k.elems`: the valid elements of a softmax slice; lanes beyond it are ignored.
- `k.reps`: the head slices per row part (softmax).
- `src0`, `src1`, `dst`: base word addresses. src0 is A, the input or the main path; src1 is B
  or the skip path.
- `src0_stride`, `src1_stride`, `dst_stride`: word strides between rows.

The same base addresses apply in every bank, because every bank holds the same rows of its own
column part.

## Top level (`chosen_top`)

`chosen_top` holds the controller, the crossbar and BN computing kernels. Its ports are:

- `clk`, `rst_n`.
- The program-load port, `start`, `busy`, `done`, and `kernel_busy`.
- One simplified AXI-style master per DDR bank:
  - a read request (`rq_valid/rq_ready/rq_addr/rq_len`, where the length is in beats);
  - read data with back-pressure (`rd_valid/rd_ready/rd_data`);
  - a write channel with one address per beat (`wr_valid/wr_ready/wr_addr/wr_data`).

The banks themselves, their memory controllers and the PCIe host link are outside the RTL. The
testbenches use a behavioural bank (`tb/ddr_bank_model.sv`) with latency, a request queue and
random stalls.

## Where this RTL departs from, or adds to, the source

- **Number of kernels.** The source's text reports eight kernels for its DeiT-B build, while
  its architecture figure and its schedule example have four kernels for four banks. Its
  resource totals (1440 BRAMs = 8 × 180 per PE array) also point to eight. How eight kernels
  would share four banks is not described. This RTL has one kernel per bank (four), the only
  arrangement the schedules describe.
- **Head-wise products.** The source mentions them only through its cost model, which gives
  head-wise products ceil(heads / kernels) rounds. The own-bank A path (`OP_HMATMUL`) is this
  design's reading of that.
- **Figure titles.** The GELU and LayerNorm schedule figures carry each other's captions. The
  titles printed inside the figures agree with the text and were followed.
- **A typo in the LayerNorm example.** One sentence of the rotating LayerNorm example has
  kernel 2 work on "row 3" in the second round. The RTL keeps each kernel on its own row across
  rounds, as the figure and the first round of the example do.
- **Not specified by the source, so chosen here:**
  - the number format;
  - the segment count and breakpoints of the GELU approximation;
  - the Padé order and range reduction of the exponential;
  - the exact reciprocal and inverse-square-root procedures;
  - the instruction format;
  - the bank protocol;
  - all handshakes;
  - the row lengths the units can buffer (197 tokens, 768 features);
  - the A tile depth (k ≤ 3072).
- **Tm.** Tm is used as the C tile width one kernel holds, i.e. one bank's column part. With
  DeiT-B the parts are at most 768 wide, so the default of 3072 is never filled by one layer.
- **Resources.** The source's resource table gives the controller 120 BRAMs and 9 DSPs. This
  controller needs neither; what those resources do in the original is not described.
- **Sizes.** The design holds DeiT-T, DeiT-S and DeiT-B (and ViT Tiny/Small/Base) at its
  default sizes. ViT Large and Huge need LayerNorm rows of 1024/1280 and a shared dimension
  above 3072. They need larger `LN_WORDS`, `KMAX` and, for Huge, `SM_WORDS`.
- **Per-model builds.** The source uses different Pn/Tn/Tm for DeiT-T (35/210/576) and DeiT-S
  (99/198/1600). These are parameter changes of the same RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against values computed
in the testbench itself: exact products, or GELU, exp, 1/x and 1/√x computed in `real`
arithmetic with error bounds. Each ends with a `TB_RESULT checks=… failures=…` line.

- **Unit benches.** `tb_pe`, `tb_pe_array`, `tb_a_tile_buffer`, `tb_gelu_unit`,
  `tb_softmax_unit`, `tb_layernorm_unit`, `tb_residual_add_unit`, `tb_computing_kernel`,
  `tb_bank_xbar` and `tb_controller`.
  - The PE array bench checks the MAC cycle count against k · ceil(Tn/Pn) · Tm/Pm.
  - The softmax and LayerNorm benches bound their latency.
  - `tb_controller` checks every burst address, length and rotation, and every write address,
    against the schedules in the table above.
- **End to end, reduced size.** `tb_chosen_top` runs the whole accelerator at Pn = 2,
  Tn = 8, Tm = 64, with four bank models that stall at random. The program is:
  1. matrix product;
  2. skip add;
  3. LayerNorm;
  4. GELU;
  5. softmax with two slices per row;
  6. head-wise product (each kernel's own A part, k = 32).

  It checks every result word and the MAC cycle count. It also counts how often each
  mechanism occurs, and fails if one never does:
  - A/B overlap in the PE array;
  - broadcast reads;
  - A tiles loaded from a kernel's own bank (head-wise products);
  - rotated reads and writes;
  - waits between rounds;
  - repeated softmax slices;
  - read back-pressure and write stalls;
  - PE-array waits.
- **End to end, full size.** `tb_chosen_top_full` runs the same program on `chosen_top` with
  all parameters at their defaults (Pn = 102, Tn = 212, Tm = 3072), on DeiT-B-shaped data:
  - a 212-row A tile times a 64 × 3072 B tile;
  - LayerNorm over 768-wide rows;
  - softmax over 197 scores, three slices per bank row;
  - GELU and the skip add on 192-element parts;
  - a head-wise product, 212 rows by one 16-column A part per bank.

  It checks about 5.2 million values and takes about 140,000 clock cycles (under a minute
  with verilator).

- **The source's other builds.** `tb_chosen_top_deit_t` and `tb_chosen_top_deit_s` build the
  accelerator with the source's DeiT-T parameters (Pn = 35, Tn = 210, Tm = 576) and DeiT-S
  parameters (Pn = 99, Tn = 198, Tm = 1600). They run the same program on those models' layer
  shapes: 197 tokens; hidden sizes 192 and 384; MLP sizes 768 and 1536; 1 and 2 head slices per
  bank. When a tile's B part is narrower than Tm, handing out the 197-element A column, at one
  element per cycle, takes longer than the MAC loop. The PE array then waits, which is the case
  the constraint Pn < Tm/Pm rules out for full-width tiles.

To run a testbench with verilator:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/chosen_pkg.sv rtl/*.sv tb/ddr_bank_model.sv \
          tb/chosen_env.sv tb/tb_chosen_top.sv --top-module tb_chosen_top
./obj_dir/Vtb_chosen_top
```

Swap in any other `tb_*` name. Only the top-level benches need `chosen_env.sv` and
`ddr_bank_model.sv`.

## What is not here

- **Off-chip parts.** The DDR4 banks with their controllers, and the PCIe host interface, are
  board infrastructure. They appear only as ports, plus a behavioural bank model for
  simulation.
- **The compiler.** The compiler that turns a model into the operation list and picks Pn, Tn
  and Tm is software. The testbenches write their operation lists by hand.
- **Whole-model runs.** No whole ViT inference is run. The frame rates the source reports
  depend on a complete schedule and real DDR timing, and are not reproduced here.
