# Platinum: a lookup-table accelerator for ternary and low-bit-weight GEMM

When weights have only a few possible values, as in ternary networks (every weight is −1, 0 or +1),
a dot product over a short chunk of inputs can take only a small set of values.
Platinum computes all of them once per input chunk, stores them in a lookup table (LUT), and then
replaces the multiply-accumulate over that chunk with one table lookup per weight row.
With 5 ternary weights per chunk, a weight row needs one 8-bit code per 5 weights.
Each lookup stands for 5 additions.

Two ideas keep the hardware small:

* **Build paths computed offline.** Each table entry is filled by adding one input to an entry that
  already exists: `lut[dst] = lut[src] ± a[j]`. A spanning tree over the table gives the order.
  The tree is computed in software and stored as a list of steps, the *build path*. The hardware
  follows that list and does no scheduling of its own.
* **Switchable paths.** A ternary path (chunk of 5, signed entries) and a binary path (chunk of 7,
  for bit-serial execution of any integer weight width) are both stored. The operation's mode
  selects one. The datapath is the same in both modes.

This repository holds synthesizable SystemVerilog for the accelerator core in its published
configuration. That configuration has 52 processing elements (PPEs), each building a 128-entry LUT
whose entries hold partial sums for 8 input columns. It has a 1080 × 520 × 32 (m × k × n) on-chip
tile. The repository also holds self-checking testbenches for every block and for the whole core,
one of them at full size.

## 1. The arithmetic

For one computation round, PPE `p` receives a chunk of `c` inputs for each of 8 columns,
`a[0..c-1][col]`. It builds a table in which entry `e` holds `Σ_j v_e[j]·a[j][col]` for one weight
vector `v_e`. It does this for all 8 columns at once, so an entry is 8 values of 8 bits.

*Ternary mode (c = 5).* There are 3⁵ = 243 weight vectors, but `v` and `−v` give negated results.
Only vectors whose first non-zero element is +1 are stored: 121 of them plus the zero vector, which
fits in 128 entries. A weight vector is packed into one byte `{sign, idx[6:0]}`. `idx` points at the
stored vector ±v. `sign` says whether the looked-up value must be negated. A query returns
`sign ? −lut[idx] : lut[idx]`. That value is already the final partial sum of 5 weights.

*Bit-serial mode (c = 7).* A `b`-bit weight is split into `b` binary planes. The table holds all
2⁷ = 128 subset sums of 7 inputs. Plane `i` is looked up in the same table and weighted by 2ⁱ.
For two's-complement weights the top plane is negated through the code's sign bit. A 2-bit weight
`w = −2·w₁ + w₀` thus becomes `y = −(lut[w₁] << 1) + lut[w₀]`.

*Reduction.* Output row `i` over one round is the sum of the 52 PPEs' query results for that row,
each covering a different chunk of k. Rounds, and bit planes, are accumulated into the output tile.

LUT entries are 8 bits wide and sums wrap modulo 256. The designer must scale activations so that
a chunk sum fits, or widen `LUT_W` in `platinum_pkg`. Query results are widened by one bit before
negation, so −(−128) is exact.

## 2. Build paths

A build path is a list of 19-bit entries, `platinum_pkg::path_entry_t`:

| bits  | field   | meaning                                  |
|-------|---------|------------------------------------------|
| 18    | finish  | end of path; the other fields are ignored |
| 17:11 | dst     | entry to write                           |
| 10:4  | src     | entry to read                            |
| 3:1   | j       | which input of the chunk to add          |
| 0     | sign    | 1: subtract `a[j]`, 0: add               |

Before a path runs, `lut[0]` is cleared, so the zero vector is the root. A path is valid for this
hardware if:

1. Every `src` was written by an earlier entry, or is 0.
2. No entry reads a `src` written by one of the two entries just before it. The pipeline keeps two
   entries in flight, and there is no hazard logic (see section 3). An assertion in `ppe_ctrl`
   fires if a path breaks this rule.
3. There are at most 127 entries before the finish entry.

Every table entry costs exactly one addition, whatever tree is used. So any spanning tree is a
minimum one, and the order only has to satisfy rule 2. The testbenches build paths
(`tb/platinum_tb_pkg.sv`) as a breadth-first tree from the zero vector. A vector's parent is the
same vector with its last non-zero element cleared. Entries are numbered in path order, so the
table fills sequentially, and the weight encoder uses the same numbering. With this order a parent
is always at least 5 entries (ternary) or 7 entries (binary) ahead of its child. The ternary path
has 121 steps and the binary path 127.

Both paths sit in `build_path_buffer`, one array per mode. Loading a new path or switching mode
needs no change to the datapath.

## 3. The construction pipeline

All PPEs follow the same path in lock step. Each cycle one entry is broadcast, and every PPE applies
it to its own inputs.

```
cycle      t            t+1                 t+2                t+3
stage 1    fetch entry  -> broadcast (construct_seq, build_path_buffer)
stage 2                 read lut[src] on port B, read a[j] from the input bank
stage 3                                     lut[src] ± a[j] in the PPE adders (8 lanes), registered
stage 4                                                        write lut[dst] on port A
```

`construct_seq` starts reading the path in the cycle `start` is high. Entry `i` is broadcast in
cycle `i+1`. It stops at the finish entry and pulses `done` in cycle `E+3` for a path of `E`
entries. That is the cycle after the last write, so a ternary table takes 124 cycles and a binary
one 130. The LUT has one read-write port and one read-only port. Construction reads on B and writes
on A, so reading and writing never compete for a port.

## 4. Queries and the reduction tree

After construction the weight tile is streamed. Each PPE bank of `weight_buffer` holds 16-bit
words: the codes of rows `2q` and `2q+1` for that PPE's chunk. In every query cycle each PPE looks
up row `2q` on port A and row `2q+1` on port B. So each cycle the array produces 2 rows × 52 PPEs ×
8 columns of partial sums, one row pair per cycle with no stalls.

Summing them needs 2 × 8 adder trees of 52 inputs. The PPE adders are idle during queries, so they
serve as the first tree level:

* PPE `2h` adds the port-A results of PPEs `2h` and `2h+1` (row `2q`).
* PPE `2h+1` adds their port-B results (row `2q+1`).

This uses the 52 × 8 PPE adders exactly. The `aggregator` adds the remaining levels: 16 pipelined
trees of 26 inputs, 5 register levels. It then performs a read-modify-write on the output buffer:
`acc = (first ? 0 : acc) + (sum << shift)`. `shift` is the bit-plane number. `first` marks the first
round and plane of a tile, so the output buffer never has to be cleared.

Latency of one row pair issued by the controller in cycle `t`:

| cycle | event |
|-------|-------|
| t     | weight buffer read |
| t+1   | LUT reads (both ports) |
| t+2   | sign flip, PPE pair sums, registered |
| t+3 … t+7 | aggregator tree levels |
| t+8   | output buffer read |
| t+9   | accumulate and write |

## 5. The tile and its buffers

| buffer | organisation | size at default |
|--------|--------------|-----------------|
| LUTs (`lut_buffer` in each `ppe`) | 52 × 128 entries × 8 × 8 bit, 1RW + 1R port | 52 KB |
| `weight_buffer` | 52 banks × 1080 words × 16 bit | 109.7 KB |
| `input_buffer`  | 52 banks × (10 rows × 4 groups) × 8 × 8 bit | 16.3 KB |
| `output_buffer` | 2 banks (even/odd rows) × (540 pairs × 4 groups) × 8 × 32 bit | 135 KB |
| `build_path_buffer` | 2 paths × 128 × 19 bit | 0.6 KB |

That is 2.57 Mbit, about 314 KB of storage. The published design quotes 324 KB on chip (272 KB of
buffers plus 52 KB of LUTs). The 32-bit accumulator width is this implementation's choice.

Data layouts, which the host must follow:

* **Inputs.** Bank `p`, row `r`, group `g` holds the 8 activations of columns `8g … 8g+7` for input
  `k = (r / c)·52·c + p·c + (r mod c)`. Round `ρ` of a tile uses rows `ρ·c … ρ·c+c−1`. At the
  default size that is 2 ternary rounds (k = 520) or 1 binary round (k = 364).
* **Weights.** Word address `(ρ·planes + plane)·540 + q` in bank `p` holds the codes of rows `2q`
  (low byte) and `2q+1` (high byte) for round `ρ`'s chunk of PPE `p`. A 1080-row ternary tile fills
  the buffer exactly. In bit-serial mode `planes × rounds ≤ 2` at 1080 rows.
* **Outputs.** Pair `q`, group `g` returns rows `2q` and `2q+1`, columns `8g … 8g+7`.

## 6. Running a tile

1. Load the paths through `path_wr_*`: `path_wr_sel` picks the mode slot, one entry per cycle.
2. Load the inputs through `in_wr_*`: one row of all 52 banks per cycle.
3. Load the weights through `w_wr_*`: one word of all banks per cycle.
4. Set `cfg` (`platinum_pkg::cfg_t`): `mode`; `n_pairs` (rows / 2); `n_rounds`; `n_groups`
   (columns / 8); `n_planes` (1 for ternary).
5. Pulse `start`. `busy` stays high until `done` pulses.
6. Read the outputs through `out_rd_*`, one row pair of one group per cycle, data the next cycle.
   Reading is allowed only while idle.

In the full system these ports face the parts around the core. Build paths arrive from the
offline path generator through a scheduler. Encoded weights arrive from DRAM through a decoder.
Inputs come from DRAM. Outputs go to DRAM or to the special function units.

`platinum_ctrl` loops over column group, then round, then bit plane, then row pair. The number of
cycles for one tile is

    groups × rounds × [ E + 4 + planes × (n_pairs + log2(L/2) + 5) ]

where `E` is the path length. The full 1080 × 520 × 32 ternary tile therefore takes
8 × (121 + 4 + 540 + 10) = 5,400 cycles, which the full-size testbench measures. That is 17.97 M
weight-input products in 5,400 cycles, about 3,330 per cycle. At 500 MHz this is 1.66 T
additions/s, the same order as the 1.53 TOP/s reported for the original chip on the b1.58-3B model
with N = 1024. That figure includes the whole model and its memory traffic, which are not
modelled here.

The same formula gives core-only latencies for whole BitNet b1.58 layers, counting every tile
and ignoring DRAM. The 3B model's 8640 × 3200 layer with N = 1024 comes to 18.0 ms, and its
3200 × 3200 layer to 6.7 ms. The 700M model's 1536 × 1536 layer comes to 1.6 ms. These are close to
the latencies published for the chip. Decode steps (N = 8) are bound by weight traffic from DRAM,
which is not modelled here. The bit-serial mode (2 planes of a 7-input table) is 1.26 to 1.51 times
slower than the ternary mode on the same layers. The published gain of the ternary mode is 1.3 to
1.4 times.

A whole layer is run as a sequence of tiles. For example, a 8640 × 3200 ternary kernel with
N = 1024 needs 8 × 7 × 32 tiles, with a partial last k-tile padded with zero weights. Partial sums
across k-tiles are added by whoever drives the tiles. `first` only covers the rounds within one
tile.

## 7. Modules

| file | block |
|------|-------|
| `rtl/platinum_pkg.sv` | sizes, `path_entry_t`, `wcode_t`, `agg_tag_t`, `cfg_t` |
| `rtl/platinum_top.sv` | the core: everything below, wired as in sections 3–4 |
| `rtl/platinum_ctrl.sv` | round / plane / pair sequencer |
| `rtl/construct_seq.sv` | stage 1: path program counter and broadcast |
| `rtl/build_path_buffer.sv` | two stored paths, selected by mode |
| `rtl/ppe.sv` | processing element: LUT, controller, adders, sign flip |
| `rtl/ppe_ctrl.sv` | stage 2–4 control and query addressing inside a PPE |
| `rtl/ppe_adder.sv` | 8 add/subtract lanes |
| `rtl/lut_buffer.sv` | 128 × 64-bit table, 1RW + 1R port |
| `rtl/input_buffer.sv`, `rtl/weight_buffer.sv`, `rtl/output_buffer.sv` | tile storage |
| `rtl/aggregator.sv`, `rtl/adder_tree.sv` | reduction trees and accumulation |

Each file opens with a description of its interface and timing. The description also says which
parts follow the published design and which are choices made here.

## 8. Simulation

Each block has a testbench `tb/tb_<module>.sv` that prints `TB_RESULT checks=N failures=M`.
`tb/platinum_tb_pkg.sv` holds the software side: path generation, weight encoding and the
path-order check. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl \
    rtl/platinum_pkg.sv tb/platinum_tb_pkg.sv tb/tb_platinum_top.sv --top-module tb_platinum_top
obj_dir/Vtb_platinum_top
```

* `tb_platinum_top` runs the whole core at 4 PPEs and a 16 × 40 × 16 tile. It runs ternary, then
  bit-serial 2-bit, then ternary with 6 rows, each compared with an exact integer GEMM. It counts
  each mechanism: both paths, path switches, accumulation over rounds, bit-plane shifts, sign
  flips, several column groups and dual-port queries.
* `tb_platinum_full` is the same procedure at the default size. It runs a 1080 × 520 × 32 ternary
  tile and then a 1080 × 364 × 32 bit-serial tile, in about 15 s including the build.
* `tb_platinum_workload` runs a 1080 × 600 slice of a ternary layer as a sequence of tiles at the
  default size: one full k-tile and one partial k-tile of 80 inputs, padded with zero weights.
  The bench adds the k-tiles' partial sums, as a host would. It runs with 32 columns (a prefill
  batch) and with 8 columns (a decode step). Each tile's cycle count is checked against the
  formula of section 6.
* The unit testbenches check each block against a reference model, including cycle timing where it
  is specified (construction `E+3`, aggregator latency 6, one row pair per cycle).

Activations in the system tests are kept small enough (|a| ≤ 25 ternary, ≤ 18 binary) that no LUT
entry wraps. Wrap-around itself is checked in `tb_ppe` with full-range activations.

## 9. Departures from the published design, and what is not here

* **Off-chip side.** DRAM, the "scheduler" and "decoder" shown between the offline tools and the
  on-chip buffers, and the special function units are not modelled. The published description names them but gives
  no detail. The top exposes plain load and read ports in their place, and loading is not
  overlapped with computation. The published design prefetches buffer contents during execution.
* **Offline tools.** Path generation and weight encoding are software. The testbench package gives
  a working version (breadth-first tree), not the original Prim-based generator. Both produce one
  addition per entry. The entry numbering, and with it the codes, differ from the example path
  printed for the original design.
* **Choices made here where the published description is silent:** 32-bit accumulators; wrap-around
  of 8-bit LUT entries; the 19-bit path entry layout; the bank layouts of section 5; which PPE
  adder serves which row in the reduction; one register per tree level; the shift-and-negate
  handling of bit planes in the aggregator; the loop order of the controller; draining the
  reduction pipeline between bit planes and rounds (about 10 cycles each); the `first` flag instead
  of clearing the output tile.
* **Accumulation.** Each round's reduced sums are added into the output buffer by a
  read-modify-write per row pair. The published text says partial sums stream straight from the
  PPEs to accumulators, without giving the accumulators' structure. Here the aggregator's last
  stage plays that part, with the output buffer as its storage.
* **Multi-tile accumulation** (partial sums across k-tiles) is left to the host.
