# Phantom: a sparse-CNN compute core and its 2-D array

Most weights and activations in a pruned CNN that uses ReLU are zero. A dense
multiply-accumulate array spends most of its cycles multiplying zeros. The
Phantom core skips them on both sides:

1. It looks at the sparsity masks of the weights and the activations.
2. It works out ahead of time which products are non-zero.
3. It packs only those products onto a small set of multipliers.

Phantom-2D tiles R x C of these cores. It balances the load between the
columns (inter-core) and between the PEs of one core (intra-core), and adds
the column results per row.

This RTL is written in SystemVerilog. Its default parameters are the
high-performance configuration:

- 7 x 4 cores;
- each core with 3 PEs of 3 multiplier threads, so 252 threads in total;
- L_f = 27, the number of input chunks one core handles per block;
- 8-bit signed data and 24-bit accumulators.

## Data layout

A 3x3 weight tile, or a 3x3 chunk of input activations, is carried as:

- a 9-bit sparsity mask, `mask_t`, indexed `[column][row]`;
- its non-zero values packed in `[column][row]` order, `packed_t`.

Each PE of a core owns one column of the filter. A core takes a *block*,
which is L_f input chunks that all use the same filter, and produces L_f
outputs. Each output is the 9-term dot product of the filter with one chunk.

## The core pipeline (`phantom_core`)

```
ia_mask/ia_nz --> LAM --> intra-core balancer --> 3 x TDS --> 3 x thread mapper --> compute engine
                   |                                                                    | (L1 adders)
                   +-- reduced LAM bits ----------------------------> output buffer (FIFOs + L2)
                                                                                          |
                                                          out_pre / out_lamr --> output encoder
```

- **Lookahead mask (`lam`).** ANDs the weight mask with each chunk mask. A 1
  marks a product that is non-zero. The OR of a chunk's LAM bits (the
  "reduced" bit) says whether its output can be non-zero at all.
- **Top-down selector (`tds_column`, one per PE).** This is the hardest part.
  For every chunk position it keeps a small memory of the 3-bit LAM column
  groups of the blocks in flight. Each cycle it picks a set of head entries
  whose ones fit in the PE's three threads:
  - the entry holding priority P1 first;
  - then any others, top-down, that still fit.

  An entry that does not fit does not block the entries below it. The
  paper calls this out-of-order selection.

  All-zero entries leave for free. P1 then moves to the first non-zero
  entry that was left behind, so none is starved.

  With the three-chunk example of the paper, the selector needs three
  cycles and produces exactly the printed maps for all three columns (for
  column 1: `011 000 010`, `001 011 000`, `000 011 001`).
- **Thread mapper (`thread_mapper`).** Turns a map of at most three ones into
  the PE's 50-bit word. The word holds three (activation, weight) byte pairs
  plus two L1 configuration bits:
  - `01`: threads 1+2 belong to one output;
  - `10`: threads 2+3;
  - `11`: all three;
  - `00`: none.

  The ones are right-aligned onto the threads. Each thread also carries the
  id (block slot, chunk) of the output it belongs to. Activations are read
  from a dense copy of the block, after zero insertion (`length_equalizer`).
- **Compute engine (`compute_engine`, `l1_adder`).** Nine 8x8 multipliers,
  plus per PE the L1 adder set by the configuration bits.
- **Output buffer (`output_buffer`).** Nine small FIFOs, one per L1 lane,
  drained every cycle into a table of partial outputs indexed by output id:
  - an output is *partial* until all three columns (PEs) have contributed;
  - a column that had nothing to contribute (all-zero LAM group) counts
    directly;
  - a block leaves, in order, when all of its L_f outputs are complete.
- **Output encoder (`output_encoder`).** Applies ReLU, builds the output
  mask (reduced LAM bit AND non-negative), and packs the surviving outputs.
- **Intra-core balancer (`intra_core_balancer`).** When one filter column is
  much denser than the others, its PE becomes the bottleneck. With `bal_en`
  set, chunk k's LAM groups are rotated right by k (mod 3), so the dense
  column's work is spread over all three selectors. The thread mapper undoes
  the rotation by reading data and weights from the original column
  (`phantom_pkg::orig_col`).

Handshake: a block is taken on `in_valid && in_ready`. Up to `DEPTH` (4)
blocks can be in flight. Latency is about 8 cycles plus the selection
cycles. Load a filter only while `idle`; an assertion checks this.

## Phantom-2D (`phantom_2d`)

- **Filter broadcast and the inter-core balancer.** The host or scheduler
  offers C filters (`f_batch_valid`). The balancer ranks them by number of
  ones. It gives the densest filter to the column that went idle first, the
  next densest to the second, and so on. One cycle later `f_assign_idx`
  shows the choice, and all cores of each column load their filter. With
  `inter_en` low, filter i goes to column i.
- **L3 adders (`l3_adder`), one per row.** Each holds a FIFO per column and
  waits until every column has delivered a block. Then:
  - in sum mode (pointwise and FC layers, where channels are split over the
    columns) it adds the C blocks, ORs their reduced LAM bits and encodes
    the result on lane 0;
  - in pass mode (regular and depthwise convolution) it encodes each column
    on its own lane.
- **Admission.** A core takes a new block only while it is fewer than
  `L3_DEPTH` (8) blocks ahead of its row's L3 adder. `in_ready` already
  includes this limit.
- **SRAMs (`sram`).** The input (4096 x 90 b) and weight (1024 x 90 b)
  buffers have a host write port and a read port brought out for the
  scheduler. There is one output bank per row. A bank word is C lanes of
  `{valid, mask[LF], packed[LF] x 24 b, count}`, lane c at
  `[c*LW +: LW]`.
- **Not included.** The scheduler, which cuts a layer into chunks and
  streams them to the cores, and the host processor with its DRAM. Their
  signals are ports of `phantom_2d`.

## Where this RTL departs from the original description

- Partial outputs are summed in a table addressed by output id. The
  original pairs same-coloured FIFOs, which is only worked out for its
  example. The sums are the same, and this works for any selection order.
- The mapper is priority logic, one per PE. The original uses a 130-entry
  lookup table shared by the PEs, which only covers L_f = 3.
- The rule for moving P1 when more than one entry is left behind is this
  design's own. It is chosen so that the printed selection example is
  reproduced exactly.
- The L3 adder waits for all columns of its row, and in sum mode applies
  ReLU after the channel sum.
- The inter-core balancer ranks all C filters. The original only says that
  the densest goes to the column that finished first.
- These sizes are assumptions: memory depths, FIFO depths, the 24-bit
  accumulator, the SRAM sizes and the output word format. Only the out-of-order
  selector is built; the in-order one is a baseline.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. For example:

```
verilator --binary --timing --assert -Irtl rtl/phantom_pkg.sv tb/tb_phantom_core.sv \
          --top-module tb_phantom_core -Mdir obj -o sim && obj/sim
```

What the main testbenches cover:

- **`tb_tds_column` and `tb_phantom_core`:** the worked selection example
  (maps and the 3-cycle count) plus random streams against a reference
  model.
- **`tb_thread_mapper`:** all 130 maps with at most three ones.
- **`tb_phantom_2d`:** end to end at 2 x 2 cores with L_f = 3. The
  testbench acts as host and scheduler. It exercises and counts:
  - stalls;
  - both balancers;
  - both L3 modes;
  - partial outputs;
  - ReLU;
  - the SRAMs.
- **`tb_phantom_2d_full`:** the same test at the default size (7 x 4 cores,
  L_f = 27). It builds and runs in a few minutes.

To change the size, override `R`, `C`, `LF` and `DEPTH` on `phantom_2d`.
`DEPTH` must be a power of two.
