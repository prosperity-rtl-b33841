# Prosperity: a product-sparsity accelerator for spiking neural networks, in SystemVerilog

## The idea: reuse whole rows, not just skip zeros

Most of the work in a spiking neural network is one kind of matrix product. A
binary spike matrix `S` (rows are neurons at one time step, after all time
steps are stacked on top of each other) is multiplied by an integer weight
matrix `W`. Each spike selects one weight row, so an output row is just the
sum of the weight rows its spikes select. Accelerators usually skip the zeros
("bit sparsity") and add one weight row per spike.

Spike rows in a real network repeat a lot, and many rows contain other rows.
If row `a` = `1011` and row `b` = `1001` (columns 0..3), then
`out[a] = out[b] + W[2]`. Once `b` is done, `a` costs one addition, not three.
If two rows are identical, the second costs nothing. This design calls:

* the reused row the **Prefix** and the reusing row its **Suffix**;
* an identical pair an **Exact Match (EM)**;
* a proper-subset pair a **Partial Match (PM)**;
* the spikes a Suffix still has to add, `row XOR prefix`, its **ProSparsity pattern**.

Exploiting this is called *product sparsity*. Each row keeps only one Prefix,
so the reuse structure is a forest. The rows then have to be computed in an
order where every Prefix comes before its Suffixes.

The hard part is to find, for every row of a tile, the best Prefix among all
the others, in time linear in the number of rows, and to hide that search
behind the arithmetic. This RTL does it with these parts:

* a ternary CAM that finds all subsets of a row in one cycle;
* a pruning rule that picks one Prefix per row;
* a sort by popcount that yields a valid execution order without walking the forest;
* a two-phase pipeline that searches tile `i+1` while tile `i` is being computed.

## Tiling

A GeMM `S[M x K] x W[K x N]` is cut into tiles of `m x k` spikes
(256 x 16) and `k x n` weights (16 x 128). The spike and weight buffers have
two banks each. A bank holds one block of 256 rows x 128 spike columns, which
is 8 k-tiles, plus the matching 128 x 128 int8 weights. A **run** processes
`num_kt` (1..8) k-tiles of the bank selected by `buf_bank`. It leaves a
256 x 128 output of 24-bit sums in the output buffer.

Longer reductions are split across several runs:

* while a run computes from one bank, the next block is written into the other bank, so loading is hidden;
* the later runs start with `accumulate = 1`, so the first k-tile of the run adds to the output instead of overwriting it.

Output-column blocks (N > 128) and row blocks (M > 256) are separate runs.
Rows a layer does not use are left as zero rows. Product sparsity is found
only inside one 256 x 16 tile.

## Finding the Prefix (Detector, Pruner)

**Subset search.** The tile's 256 rows of 16 bits sit in a ternary CAM
(`tcam`). To find every subset of query row `q`, the search makes the `1`
positions of `q` don't-care and requires a `0` everywhere `q` has a `0`. An
entry matches exactly when it has no spike outside `q`. The 256-bit match
vector is the *subset index* (SI). The CAM has two banks:

* the next tile is written into one bank, 8 rows per cycle (32 cycles);
* the current tile is searched in the other.

Eight `popcount` units count the ones (NO) of each row as it is written.

**Choosing one Prefix** (`pruner`):

1. Drop every candidate `j` with `NO[j] == NO[q]` and `j >= q`. For a subset, equal popcount means an identical row. This removes `q` itself, and only an earlier identical row may serve as Prefix, which keeps EM chains acyclic.
2. Take the remaining candidate with the most ones, because it leaves the fewest additions. Ties go to the larger index. Rows with zero ones are never used.
3. The pattern is `q XOR prefix` (`q` if there is no Prefix).

Each row is written into the product sparsity table as `{prefix, pattern}`
(`ps_table`, 8 + 16 bits, two banks, 1.5 KB). A row without Prefix stores its
own index as Prefix.

**Execution order** (`stable_sorter`, `dispatcher`). A PM Prefix has fewer
ones than its Suffix. An EM Prefix has the same count and a smaller index.
Sorting the rows by the key `{NO, index}` therefore places every Prefix before
its Suffixes. The forest never needs to be traversed, and no Suffix lists are
stored. The sorter is a bitonic network on 256 keys. One stage is applied per
cycle, so the sort takes 36 cycles and runs beside the 260-cycle search. The
index in the key makes all keys distinct, which is what makes the order stable.

Worked example (six rows of four bits, columns 0..3):

| row | bits (col 0..3) | NO | Prefix | pattern |
|---|---|---|---|---|
| 0 | 1010 | 2 | 3 | 1000 |
| 1 | 1001 | 2 | none | 1001 |
| 2 | 1011 | 3 | 1 | 0010 |
| 3 | 0010 | 1 | none | 0010 |
| 4 | 1011 | 3 | 2 (EM) | 0000 |
| 5 | 1101 | 3 | 1 | 0100 |

The sorted order is 3, 0, 1, 2, 4, 5. `tb_pruner` and `tb_stable_sorter` check
this example.

## The pipeline and its timing

Per k-tile there are three phases, each run by its own hardware:

| phase | does | cycles |
|---|---|---|
| pre-load | spike buffer -> idle CAM bank, popcounts | 256 / 8 = 32 |
| ProSparsity | read row, mask, CAM search, prune (register), XOR + table write; sort in parallel | 256 + 4 |
| computation | issue each row in sorted order, accumulate, write back | sum over rows of max(1, pattern ones) + 2 |

`ppu_ctrl` runs the phases in slots. Slot `s` does three things in parallel:

* pre-loads tile `s`;
* searches tile `s-1`;
* computes tile `s-2`.

The CAM, NO vectors, table and sorted order all alternate between two banks
by tile parity. A slot ends when all its phases are done, plus one launch
cycle. A computation phase lasts at least 258 cycles, because every row takes
at least one cycle, even an EM row with an empty pattern. It is therefore
normally the longest phase, and the search is hidden. For 8 k-tiles a run
takes about `8 x (computation + 1)` cycles, plus one search and one pre-load
at the start.

The ProSparsity phase issues one row per cycle. Its stages are:

| step | stage | kind |
|---|---|---|
| 2 | read | register |
| 3 | mask | register |
| 4 | search | register |
| 5 | prune | register |
| 6 | XOR | combinational into the table write |

Row `r` is written to the table at cycle `r + 4`, so the phase ends after `m + 4` cycles.

## Computing a row (Processor)

The `processor` takes tasks `{row, prefix, has_prefix, pattern}` from the
Dispatcher over a valid/ready handshake. Each row passes three steps:

* **Issue** registers the next task.
* **Execute**, in a row's first cycle, loads the 128 partial sums with the Prefix row's result and adds the first weight row. The Prefix result is zero when there is no Prefix. Each later cycle adds one more weight row. `addr_decoder` picks the lowest remaining `1` of the pattern and clears it (bit-scan-forward). The weight address is `k-tile x 16 + bit`.
* **Write-back** happens when no `1` is left. It stores the row's result in two places: the tile-local array, for later Suffixes, and the accumulated output (`out = first ? r : out + r`). The next row starts in the same cycle.

Two details matter:

* **The Prefix must be the tile-local value.** A Prefix shares spikes with its Suffix only within the current 16 columns. Its accumulated output also contains earlier k-tiles, which the Suffix does not share. The output buffer therefore keeps two arrays: 256 x 128 x 12-bit tile-local results and 256 x 128 x 24-bit accumulated outputs.
* **Bypass.** When a row's Prefix is the row being written back in that same cycle, the buffer does not hold the value yet. The partial-sum registers are used directly (`ev_bypass`). A Prefix is always issued earlier in sorted order, so no other hazard exists.

While a row with many spikes is still accumulating, the next task waits in the issue register (`ev_stall`).

## Around the PPU

* **Spiking neuron array** (`spiking_neuron_array`): 32 LIF cells. After a run, the output row `t*L + l` is the input current of position `l` at time step `t`. The array walks positions, then 32-column groups, then time steps:
  * `v = (t==0 ? 0 : v - (v >>> leak_shift)) + I`;
  * a spike when `v >= threshold`, after which `v` resets to 0;
  * it emits 32 spikes per cycle.

  While it runs, it owns the output buffer's read port.
* **Special function unit** (`sfu`): 128 AND/OR lanes, 32 signed 16x16 multipliers, 8 base-2 exponent lanes (Q8.8 in, Q16.16 out, linear mantissa) and one divider. Each result comes one cycle after the request. These serve softmax and normalisation in spiking transformers. The sequencing of those functions is left to an outside controller.
* **Top** (`prosperity_top`) has these ports:
  * buffer write ports standing in for DRAM traffic: `sb_*` (one 128-bit spike row per cycle) and `wt_*` (one 128-byte weight row per cycle), each with its bank select;
  * an output read port, `ext_*`;
  * the neuron array's spike stream, `nrn_*`;
  * the SFU request port;
  * event strobes for EM, PM, no-Prefix, bypass, stall and weight-row add.

## Parameters

All defaults are in `prosperity_pkg`. Each module also takes them as parameters.

| name | default | meaning | origin |
|---|---|---|---|
| `M` | 256 | rows per tile (m) | paper |
| `K` | 16 | spike columns per tile (k) | paper |
| `N` | 128 | output columns = PEs (n) | paper |
| `P` | 8 | popcount units / CAM rows written per cycle | paper (8 popcounts) |
| `WW` | 8 | weight width | paper |
| `KBUF` | 128 | spike columns (= weight rows) per buffer bank | derived from 8 KB spike / 32 KB weight buffers, two banks each |
| `OW` | 24 | accumulated output width | derived from the 96 KB output buffer |
| `LW` | 12 | tile-local result width (8 + log2 16) | this design |
| `NCELL` | 32 | LIF cells | paper |

`M` must be a power of two, and `KBUF` a multiple of `K`.

## Where this RTL departs from the paper

* **Popcounts run during pre-load**, not beside the search. The Pruner needs every row's NO from the first query on. The phase length is unchanged.
* **Query rows are read from the CAM bank, not the spike buffer.** Both hold the same tile. Reading the CAM leaves the spike buffer free for the next pre-load.
* **Processor depth.** The paper describes four stages (issue; decode and load; execute; write back) and a computation phase of at least `m + 4` cycles. Here load, decode and the first add share one cycle, so the phase is at least `m + 2` cycles.
* **Separate tile-local result store** (48 KB beside the 96 KB output). The paper accumulates into the output tile and does not say where the tile-local Prefix value lives.
* **The published buffer sizes count both banks.** The paper gives 8 KB spike and 32 KB weight buffers and also asks for double buffering against DRAM. It does not say which is per bank. Here each capacity is the total of two banks.
* **The output buffer is single-banked.** 96 KB holds exactly one 256 x 128 output of 24 bits. Results must be read (or consumed by the neuron array) between runs.
* **Exponent and divider arithmetic** (formats, base-2 linear approximation, single-cycle divide) is this design's own. The paper gives only the lane counts. Softmax and layer-norm sequencing is not built.
* **Control** (slot lock-step, valid/ready task handshake, accumulate input, shared output read port) is this design's own.
* **LIF details**: leak as an arithmetic shift, reset to zero, and the row order `t*L + l`.
* **No clock target** is set. The published design runs at 500 MHz in 28 nm. Here the CAM search and the 256-way ArgMax are each a single combinational cycle, which is deep logic.

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

* compares against models written independently of the RTL (`tb/prosparsity_ref_pkg.sv` holds the Prefix and order reference);
* has a watchdog;
* ends with a `TB_RESULT checks=... failures=...` line.

| testbench | what it establishes |
|---|---|
| `tb_popcount`, `tb_addr_decoder`, `tb_pe_array` | arithmetic primitives on random and corner cases |
| `tb_tcam` | subset search, don't-care masks, bank isolation, the six-row example |
| `tb_detector` | SI of every row against a set-based model; pre-load of 32 cycles; 1 row/cycle |
| `tb_pruner` | the example above; random tiles against the pruning rules; latency and throughput |
| `tb_stable_sorter` | the example order; random keys; 36 cycles at M=256 |
| `tb_ps_table`, `tb_dispatcher` | bank separation; issue order; handshake back-pressure |
| `tb_processor` | row sums with bypass and stalls against a plain product |
| `tb_ppu_ctrl` | slot schedule, bank parity, first/accumulate flag |
| `tb_ppu` | reduced PPU (M=64): full GeMM, `m+4` phase length, computation cycles, overlap |
| `tb_prosperity_top` | full default size, below |
| `tb_spiking_neuron_array`, `tb_sfu`, the three buffers | against behavioural models |

`tb_prosperity_top` runs the whole design at the default size, with no
parameter overrides:

* 16 k-tiles of 256 x 16 spikes, with clustered and repeated rows, and 256 x 128 random int8 weights;
* the first 8 k-tiles go into bank 0 and run, and the other 8 are written into bank 1 while that run is busy (every write is checked to fall inside it), then run with `accumulate` set;
* every output is checked against `S x W`;
* every ProSparsity phase is checked to take 260 cycles, and every computation phase its predicted length;
* each phase after the first must overlap a computation;
* a LIF pass over the result is checked spike by spike, and each SFU operation is run once;
* a third run repeats two k-tiles of bank 0 with `accumulate` set, and the sums are checked again.

It counts EM rows, PM rows, rows without Prefix, bypasses, stalls and
overlapped phases, and fails if any of them never occurs. A typical run gives:

| EM rows | PM rows | no Prefix | bypasses | stalls |
|---|---|---|---|---|
| 1127 | 2535 | 434 | 281 | 3047 |

It takes about ten seconds of simulation.

To simulate one testbench with Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_prosperity_top rtl/prosperity_pkg.sv tb/prosparsity_ref_pkg.sv \
  tb/tb_prosperity_top.sv --Mdir obj_top -j 8
./obj_top/Vtb_prosperity_top
```

Replace the top module and file for any other testbench. The RTL is
two-state clean: every register that is read has a reset.

With `verilator --lint-only -Wall` the remaining warnings are deliberate:

* package constants that a module linted alone does not use;
* status outputs nothing consumes: the sorter's `busy` in the Dispatcher and the Dispatcher's `iss_done` in the PPU;
* the upper bits of a partner index in the sorter;
* `SYNCASYNCNET` on `rst_n`, which is used both as the asynchronous reset and in the `disable iff` of the processor's Prefix assertion.

## Not built

* Off-chip DRAM and its controller. The top exposes buffer write ports in their place.
* Double buffering of the output buffer.
* Softmax and layer-norm sequencing on the SFU.
