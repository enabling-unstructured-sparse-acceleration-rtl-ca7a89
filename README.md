# TASD accelerator: unstructured sparsity on structured-sparse tensor cores

Structured-sparse tensor hardware is fast when every block of M consecutive
elements holds at most N non-zeros (N:M sparsity, e.g. 2:4 or 4:8). Real
tensors do not follow such a pattern: pruned weights are sparse in no
particular pattern, and activations after ReLU have zeros wherever the data
puts them. *Tensor approximation via structured decomposition* (TASD) closes
the gap by writing a tensor as a short sum of structured-sparse tensors:

    A  ~  A1 (N1:M)  +  A2 (N2:M)

A1 keeps, in every block of 8, the N1 largest elements of A; A2 keeps the N2
largest of what is left; anything still left is dropped. Because matrix
multiplication distributes over addition, `A x B ~ A1 x B + A2 x B`, and
each product runs on structured-sparse hardware. With patterns 1:8, 2:8 and
4:8 in hardware, one or two terms give 1:8 through 6:8 and 8:8 (dense):

| density | series      | density | series      |
|---------|-------------|---------|-------------|
| 1:8     | 1:8         | 5:8     | 4:8 + 1:8   |
| 2:8     | 2:8         | 6:8     | 4:8 + 2:8   |
| 3:8     | 2:8 + 1:8   | 7:8     | (none)      |
| 4:8     | 4:8         | 8:8     | dense       |

Weights can be decomposed offline by software. Activations are only known at
run time, so this accelerator decomposes each layer's output in hardware as
the output leaves the PE array, ready to be the next layer's structured-sparse
input. This RTL implements that accelerator: four TASD tensor cores (TTCs),
each a 16x16 N:M PE array with 16 decomposition units, sharing an L2
scratchpad.

## Block structure

```
tasd_hw                      top: 4 TTCs + shared L2, one sequencer
 |- tasd_seq                 pass sequencer, global advance/stall
 |- l2_smem                  B rows (64 x 128 x 8 bit), broadcast to all TTCs
 `- ttc  x4                  TASD tensor core
     |- l1_smem              C tile (64 rows x 16 x 32 bit), stays across passes
     |- nm_pe_array          16x16 PEs, A stationary, N:8 structured sparse
     |   |- indexing_unit    sends each PE row its 8-element B block
     |   `- nm_pe x256       RF (one A value + 3-bit index), B mux, MAC
     |- tasd_unit_pool       round-robin over 16 TASD units, result collector
     |   `- tasd_unit x16    sequential top-N extraction over one 8-element block
     |       `- tasd_max_tree  7-comparator tree
     `- dblk_buffer          decomposed blocks (term-1 and term-2 tiles)
```

`tasd_pkg` holds the widths (8-bit signed A/B, 32-bit accumulators, M = 8),
the pattern code `pattern_e` (log2 N: 0 = 1:8, 1 = 2:8, 2 = 4:8, 3 = dense),
the series configuration `tasd_cfg_t {n1, n2}` and the stored
decomposed-block format `dblk_t`.

## The TASD unit: decomposition in N1+N2 cycles

The decomposition unit is the only part that structured-sparse hardware does
not already have, and it is small. A unit takes one 8-element block and
then, once per cycle, uses a tree of seven two-input comparators to find the
largest-magnitude element still in the block. It emits that element as
`(index, value)` and removes it from the block. The first N1 picks are the
block's term-1 entry and the next N2 picks its term-2 entry. A 4:8 + 1:8
series therefore takes 5 cycles:

```
cycle    T1        T2   T3   T4   T5   T6      T7
block    loaded
picks              4:8  4:8  4:8  4:8  1:8
result                                         res_valid (whole block)
in_ready high again in T6 (last pick): the next block can load then
```

Details that matter when using the unit:

* **Magnitude, not value.** Elements are ranked by |a|, so negative
  activations (for example after GELU) are treated like positive ones. The
  most negative value is handled exactly.
* **Ties go to the lower index.** If the remaining elements are all zero,
  the unit still fills the slot with an explicit zero at the lowest index it
  has left, so every term entry always holds exactly N slots. A zero in a slot
  costs nothing in the PE array, because it multiplies to zero.
* **Legal series:** N1 >= 1 and N1 + N2 <= 8 (asserted). A unit is therefore
  busy for at most 8 cycles per block.
* Besides the assembled block (`res_*`, held until `res_ready`), the unit
  also shows each pick on `ext_*` in the cycle it is made.

## Keeping up with the PE array

Each PE array outputs 16 values per cycle, which is two 8-element blocks.
`tasd_unit_pool` gives them to its units in a fixed rotation. Row 0 goes to
units 0 and 1, row 1 to units 2 and 3, and so on; row 8 comes back to units 0
and 1. Every unit therefore gets a new block every 8 cycles, which is the
longest a series can take, and a unit accepts its next block in its last pick
cycle. With 16 units (two blocks per cycle times eight cycles) the
decomposition never stalls the array. `tb_tasd_unit_pool` checks this for
every series length.

If the pool has fewer units, the target units may still be busy. The pool
then drops `in_ready`, the TTC raises `stall`, and the sequencer holds every
pipeline stage of every TTC (the SRAM output registers included) until the
units are free. Nothing is lost, only time. The tests build pools with 2 and
4 units to exercise this path.

Finished blocks are collected lowest unit first, two per cycle (two write
ports on `dblk_buffer`). Each is written at its block id,
`row * 2 + (0 | 1)`, so the order in which units finish does not matter.

## The N:M PE array and its mapping

The A tile is *stationary*: it is loaded into the PE register files once and
reused for every streamed B row. It is stored compressed. For an N:8 pattern,
PE row `r` holds slot `r mod N` of reduction block `r div N`, and PE column `c`
belongs to output `c`. Each PE keeps the non-zero value and its 3-bit
position in the block. One pass therefore covers this many reduction
elements:

| pattern | non-zeros per block | reduction length per pass |
|---------|--------------------:|--------------------------:|
| 1:8     | 1                   | 128                       |
| 2:8     | 2                   | 64                        |
| 4:8     | 4                   | 32                        |
| dense   | 8                   | 16                        |

A streamed B row has 128 elements, of which an N:8 pass uses the first
128/N. The indexing unit gives PE row `r` the 8-element block `r div N`. Each PE selects its element with its stored index, multiplies it,
and adds the product into the column's partial sum, which starts from the C
value read from L1. So each cycle column `c` produces

    C[t][c] = C_old[t][c] + sum_k A[c][k] * B[t][k]

The column sum is a combinational chain through 16 PEs, followed by one
output register.

When both terms of a series come from the same A tile, they must cover the
same reduction range. The term with the larger N sets that range. For
4:8 + 1:8, the 4:8 tile fills all 16 PE rows over 32 elements, and the 1:8
tile fills PE rows 0-3 over the same 32 elements. The other PE rows are
loaded with zeros.

## A pass, and how a series is run

The four TTCs run in lockstep under `tasd_seq`. A pass has three pipeline
stages:

1. **Issue** row `t`: L2 reads B row `t`, and each L1 reads C row `t`.
2. **Compute:** the B row is broadcast to all four arrays. Each array adds
   its A x B row to C (or to zero when `accumulate` is 0).
3. **Write back** to L1 row `t`. On the pass flagged `last_pass`, the row
   also goes to the TASD units.

`done` pulses after the last row has drained and every TASD unit is idle.
Without stalls, a pass of R rows takes R + 5 cycles from `start` to `done`.
The last pass also has the decomposition tail.

A series `A1 + A2` runs as two passes over the same B rows and the same C
tile. Only the A term changes between them:

```
load B rows into L2                     (l2_wr_*)
load A1 tiles, one per TTC              (a_wr_*, a_wr_ttc_mask)
start: pattern=N1, accumulate=0, last_pass=0, rows=R
load A2 tiles
start: pattern=N2, accumulate=1, last_pass=1, cfg={n1,n2} of the output series
read C rows (c_rd_*) and/or decomposed blocks (d_rd_*), one cycle latency
```

B stays in L2 and C stays in L1 across the two passes. Longer reductions are
more passes with `accumulate = 1`. `a_wr_ttc_mask` may select several TTCs,
so the same tile is loaded into all of them in one write (multicast). Loads
are not allowed while a pass runs (asserted).

The decomposed output of block `b` is stored as `dblk_t`: term-1 slots
`t1_val/t1_idx[0..n1-1]` and term-2 slots `t2_val/t2_idx[0..n2-1]`. Unused
slots are zero. The index is the position within the 8-element block.
Block `b` covers columns `8*(b mod 2) .. 8*(b mod 2)+7` of C row `b div 2`.

## Parameters

| parameter (module)         | default | origin |
|----------------------------|--------:|--------|
| `NUM_TTC` (tasd_hw)        | 4       | reference design |
| `ROWS` x `COLS`            | 16 x 16 | reference design (16 outputs per cycle) |
| `M` / `BLK_M`              | 8       | reference design (N:8 patterns) |
| `NUM_UNITS` per TTC        | 16      | reference design (2 blocks/cycle x 8 cycles) |
| `L1_DEPTH`, `L2_DEPTH`     | 64      | this design's choice |
| `DATA_W`, `ACC_W`          | 8, 32   | this design's choice |
| dblk entries per TTC       | 128     | follows from L1_DEPTH x 2 |

## What follows the reference design and what does not

These parts follow the reference design:

* Four TTCs sharing L2 and off-chip memory.
* Each TTC holds an L1 scratchpad, an N:M array of 16x16 PEs (a register file
  and a MAC each) under an indexing unit, and several TASD units.
* The TASD unit is a comparator tree over a1..a8 that outputs `(i, a_i)`, one
  extraction per cycle.
* Two blocks per cycle are handed out round-robin to 16 units. Timing follows
  the 4:8 + 1:8 example: block in T1, picks in T2-T5, last pick in T6.
* Patterns 1:8, 2:8, 4:8 and dense. Series of at most two terms.
* B kept in L2, C kept in L1, and A held stationary in the PE register files.
  The decomposed A terms change between passes. B is broadcast and A is
  multicast.

These are this design's own choices, where the reference description is
silent:

* Number formats: 8-bit signed A and B, 32-bit accumulators. The decomposed
  output keeps 32-bit values. There is no requantisation or activation
  function between layers.
* Ranking by magnitude, ties to the lower index, and explicit zero slots.
* The compressed A-to-PE mapping, the indexing-unit function, and the
  combinational column reduction.
* The sequencer, the three-stage pipeline, the global stall, and all
  handshakes.
* The memory sizes and the decomposed-block storage format.
* One register-file entry per PE, with no double buffering of A.
* The ready/stall path of the unit pool. The reference design needs no stall
  path because 16 units never stall.

Not included:

* Off-chip DRAM. Its side is the top-level ports.
* The offline software that chooses a series for each layer and decomposes
  weights.
* Any feedback of decomposed blocks into the next layer's A load. This is left
  to whatever drives the ports.
* Clock gating for zero operands.
* The N:4 variants and the 2:4-only tensor-core variant, which served only as
  comparison points.

## Sizing against the evaluated layers

The reference evaluation uses GEMM layers such as M784-N128-K1152 (an early
ResNet-50 layer) and M768-N128-K3072 (a BERT feed-forward layer). This
accelerator runs such layers tile by tile:

* 16 A rows per TTC, so 64 across the four TTCs.
* Up to 64 B rows per pass.
* 32 reduction elements per pass for a 4:8 term.

For M784-N128-K1152 that is 49 A-row tiles in 13 rounds of 4 TTCs, 2 B-row
tiles and 36 reduction chunks, each chunk taking two passes for a two-term
series. Products of 8-bit numbers summed over K = 3072 need fewer than 28 bits,
which fits in the 32-bit accumulators. Whole layers do not fit on chip and
are streamed through the off-chip ports. `tb_tasd_workload` runs such a
chunked reduction on a smaller K.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints a single
`TB_RESULT checks=N failures=M` line and stops itself with a watchdog. Build
and run any of them with Verilator 5, package first:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/tasd_pkg.sv $(ls rtl/*.sv | grep -v tasd_pkg) tb/tb_tasd_hw.sv \
    --top-module tb_tasd_hw
./obj_dir/Vtb_tasd_hw
```

| testbench            | what it checks |
|----------------------|----------------|
| `tb_tasd_unit`       | Decomposition of random and directed blocks against a reference. Latency N1+N2. Acceptance of a new block in the last pick cycle. |
| `tb_tasd_unit_pool`  | Round-robin order and one write per block. No stall with 16 units for any series. Stalls, with correct results, with 4 units. |
| `tb_nm_pe`, `tb_indexing_unit`, `tb_nm_pe_array` | MAC and index select. Block routing for every pattern. Array output against dense dot products for all four patterns. Output freeze on stall. |
| `tb_l1_smem`, `tb_l2_smem`, `tb_dblk_buffer` | Read/write behaviour, including read-data hold. |
| `tb_tasd_seq`        | Row order, stall freeze, wait for the units, pass length R + 5. |
| `tb_ttc`             | Two accumulating passes, then C and decomposed blocks. A 2-unit TTC must stall and still match. |
| `tb_tasd_hw`         | End to end at reduced size (4 units per TTC, 32-row L1): six operations covering every pattern, one- and two-term series and several output series. Counts accumulate passes, multicast loads, decompositions and stalls; each must occur. |
| `tb_tasd_hw_full`    | One complete 4:8 + 1:8 operation with every parameter at its default (64 rows, 4 TTCs, 512 decomposed blocks). Checks every C value and block, and that no stall occurs. |
| `tb_tasd_workload`   | GEMM tiles shaped like the evaluated layers, at default parameters, with a reduction longer than one pass. A 3:8 series over K = 192 in 3 chunks, and a 6:8 series over K = 128 in 4 chunks. Each chunk rewrites B, reloads both A terms and accumulates into the same C tile. C and the decomposed output are checked against a reference over the whole reduction. |

The reference models in the testbenches build the dense A, compute C in
64-bit integers and decompose by scanning for the first maximum magnitude.
They share no code with the RTL. Most of the full-size test's run time is the Verilator build.
