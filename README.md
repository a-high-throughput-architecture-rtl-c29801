# A list successive-cancellation polar decoder for large list sizes

A list successive-cancellation (LSC) decoder keeps up to L candidate
decodings ("paths") of a polar code alive at once. Each time it meets an
information bit, every path splits into two, and the 2L children must be
pruned back to L. With a large list (L = 32), two costs dominate a
straightforward design:

- the 2L-to-L sorting that prunes the list after every information bit;
- the serial, bit-by-bit nature of successive cancellation itself.

This RTL follows an architecture that attacks both costs.

1. **Multi-bit double thresholding.** The decoder works on sub-trees of
   M = 8 bits at a time. Each sub-tree is cut into *tuples* that contain at
   most one "unreliable" bit, so every path expands into at most two
   children per tuple. The children are pruned without sorting them: two
   thresholds are read off the sorted metrics of the L *parents*, and each
   child is compared against them.
2. **Selective expansion.** Information bits are split in advance into
   unreliable bits, which are expanded into two paths, and reliable bits,
   which are decided by their hard decision alone. Many tuples then need no
   pruning at all.
3. **Partial look-ahead in the SC cores.** The top stage of the decoding
   tree is computed once for all paths, in look-ahead form (F, G with
   partial sum 0, G with partial sum 1). Each path later picks the
   candidate its own partial sums select. This halves the top-stage storage
   and time, and means the channel LLRs need not be kept.

The default configuration is a (1024, 512) code with a 24-bit CRC:
N = 1024, list size L = 32, M = 8 bits per sub-tree, and P = 64
processing elements per path. LLRs are 6 bits and path metrics 8 bits.

## Block map

```
 channel LLRs ──► channel buffer ──► PE array 0 (look-ahead mode) ──► top-stage buffers F/G0/G1 (shared)
                                                                          │
   per path l:  LLR memory[l] ──► L×L crossbar (lazy copy) ──► PE array[l] ──► LLR memory[l]
                                                                          │ stage-m LLRs (M per path)
                                                                          ▼
                            LM module:  PMU[l] ── sorter ── DTS  ──► list permutation + M new bits per path
                                                                          │
                 partial-sum network ◄───────────────┬────────────────────┤
                 path memory        ◄────────────────┘                    ▼
                 CRC unit ──► dout, crc_ok                     control unit (code-set ROM, tuple division, schedule)
```

| Module | Role |
|---|---|
| `lscd_pkg` | Widths (Q_LLR = 6, Q_PM = 8), the sign-magnitude `llr_t`, the bit-class and tuple-type enums, saturating adders, and an in-place polar transform function. |
| `ppe` | Programmable processing element: F/G, or F + G0 + G1 in look-ahead mode. |
| `pe_array` | P PEs that serve one path. |
| `llr_ram` | Word-organised LLR storage: one write port and two read ports. |
| `llr_crossbar` | L×L word crossbar used by the pointer-based lazy copy. |
| `sub_pmu`, `pmu` | Path-metric update of one path for a tuple of T = 1 … M bits. |
| `pm_sorter` | Finds the acceptance and rejection thresholds among L metrics. |
| `dts` | Double-threshold selection of L paths out of 2L. |
| `lm_module` | List manager: L PMUs, the sorter and the DTS, scheduled per tuple type. |
| `tuple_div` | Cuts the remaining bits of a sub-tree into the next tuple. |
| `ps_network` | Per-path partial sums. |
| `path_mem` | Decoded bits of every path. |
| `crc_unit` | CRC-24 check of every path and choice of the output word. |
| `control_unit` | Code-set ROM and the frame schedule. |
| `lscd_top` | The complete decoder. |

## The list manager: tuples, metrics and two thresholds

This is the heart of the design and the part that needs the most care.

### Bit classes and tuples

The control unit holds one 2-bit class per bit index:

- **frozen**: always 0;
- **unreliable information**: both values are tried, so a path splits in two;
- **reliable information**: taken from the hard decision, so the path does not split.

The classes are written through the `cfg_*` port, so the same hardware
decodes any code of length N. For the current sub-tree, `tuple_div`
returns the largest aligned power-of-two block, starting at the current
offset, that has one of these shapes:

| Type | Contents | LM clocks |
|---|---|---|
| SP2-frozen | all bits frozen | 1 |
| SP2-reliable | all bits reliable | 1 |
| SP1 | first bit unreliable, the rest reliable | 2 |
| rate-1/T | one unreliable bit, the rest frozen | 3 |

A single bit always has one of these shapes, so the division always makes
progress. Choosing the largest aligned block greedily gives the same
division as the published recursive algorithm; the testbench checks this
against a recursive model.

### Metric update (`pmu`, `sub_pmu`)

A tuple of T = 2^t bits is decoded from the T LLRs at stage t of the
sub-tree. The PMU gets the M stage-m LLRs of its path and walks them down
to stage t with a triangle of PEs:

- it takes the F branch for a left child;
- it takes the G branch for a right child, with the partial sums of the
  bits already decided in this sub-tree.

It then builds two candidate bit vectors, A and B:

| Tuple type | A | B |
|---|---|---|
| SP2-frozen | all zero | (same as A) |
| SP2-reliable | hard decisions | (same as A) |
| SP1 | the best vector of even parity | the best vector of odd parity |
| rate-1/T | all zero | the encoded unit vector of the unreliable bit |

For SP1, the hard decision is one of the two vectors. The other is the hard
decision with its least-reliable bit flipped.

The penalty of a candidate is the sum of |LLR| over the positions where it
disagrees with the hard decision. This is the usual hardware approximation
of the path-metric update. There is one sub-PMU per tuple size
(T = 1, 2, 4, 8), and `t` selects which one is used. Outputs:

- `theta`: the smaller of the two child metrics;
- `pm_max`: the larger one;
- `b_first`: which candidate was smaller;
- the encoded bit vectors of A and B.

### Double-threshold pruning (`pm_sorter`, `dts`)

The L parent metrics are ranked, and two thresholds are read off:

- the acceptance threshold AT is at rank L/2;
- the rejection threshold RT is at rank `RT_IDX`.

A child below AT is always kept. A child above RT is always dropped. A
child in between is a candidate that fills the free slots.

- **Why the thresholds are safe.** L/2 parents have a metric below AT, and
  each has a child no worse than itself, so at least L/2 children are
  below AT.
- **Why `RT_IDX` is not L-1.** The plain rule sets `RT_IDX` = L-1. The
  default follows the cheaper "advanced" variant: rank 25 for L = 32, 12
  for L = 16 and 6 for L = 8. The list may then hold fewer than L paths
  after a prune, and `valid` marks the empty slots.
- **Slot order.** Kept children take slots first, then candidates, each
  group in index order (path 0 child 0, path 0 child 1, path 1 child 0, …).
  Choosing candidates in index order rather than at random is deterministic
  and can be checked exactly.
- **Sorter.** The sorter counts, for every entry, how many entries precede
  it. This is a one-clock, L·(L-1)-comparator ranking, used only to pick
  the two thresholds. The 2L children are never sorted.

### Scheduling per tuple type (`lm_module`)

`lm_module` holds, for every list entry:

- the metric and a valid flag;
- the stage-m LLRs of its sub-tree;
- the bits decided so far in the sub-tree (`u_sub`);
- `perm`: the index the entry had when the sub-tree began.

Entries are reordered inside the LM module during a sub-tree. `perm` tells
the partial-sum network, the path memory and the LLR pointers how to follow
the reordering once the sub-tree ends. Each tuple type has its own schedule:

- **SP2 (1 clock).** No path splits. The PMU result (metric of A, bits of
  A) is written back in the start clock, and `done` follows on the next
  clock.
- **SP1 (2 clocks).** Flipping the least reliable bit only ever *adds* a
  penalty, so the better child of every path has the parent's metric. The
  thresholds can therefore come from the parent metrics that are already
  stored:
  1. PMU and sorting run together;
  2. DTS.
- **Rate-1/T (3 clocks).** Both children may carry a penalty, so the
  thresholds must come from the children's `theta` values:
  1. PMU;
  2. sorting of `theta`;
  3. DTS.

In the DTS clock, each slot copies its parent's LLRs, `perm` and `u_sub`,
and writes in the bits of the chosen child. The chosen vector is B when the
branch bit differs from `b_first`, and A otherwise.

An immediate assertion checks that no more than L children ever fall below
AT.

## SC cores

### Programmable PE (`ppe`)

LLRs are sign-magnitude values: 1 sign bit and 5 magnitude bits. One PE
computes |a| + |b|, |a| - |b| and |b| - |a|. The borrow of |b| - |a| picks
both the minimum and the non-negative difference, so the outputs are:

- F = (sign a xor sign b, min);
- G(ps=0) and G(ps=1), each either the saturated sum or the difference,
  with the sign of the larger operand.

The input stage chooses each operand from two candidates:

- in normal mode the selects are 0 and only I.0 and I.2 are used;
- when reading look-ahead data, the selects are the partial sums of the
  node.

The output stage has two modes:

- look-ahead mode: O.0 = F, O.1 = G(ps=0), O.2 = G(ps=1);
- normal mode: O.1 = F or G(ps).

### Top-stage precomputation (PCMS)

When `start` is asserted, PE array 0 reads the channel buffer. Over N/(2P)
clocks it writes F, G0 and G1 of the top stage into three shared buffers
of N/2 LLRs each. No path stores the top stage, so its storage is 3N/2
LLRs instead of L·N/2. Any path that later needs a top-stage LLR reads all
three shared buffers. Its own partial sums then act as PE input selects:

- a left-half node takes its two operands from the F candidates;
- a right-half node takes them from G0 or G1.

This is why the PE has four inputs.

### Per-path LLR memories and the lazy copy

Each path has an `llr_ram` that holds stages m … n-2 in P-LLR words, each
stage at a fixed base address. When a stage s < n-1 is computed, a path
reads stage s+1 from the memory that actually holds its data: memory
`src[l][s+1]`, through the L×L crossbar. It then writes stage s into its
own memory and sets `src[l][s] = l`.

When the LM module reorders the list, only the pointers move
(`src[l] <= src[perm[l]]`). No LLR data are copied.

Each stage is laid out by its size:

- a stage of at least 2P LLRs takes 2^s/P clocks per node, and reads its a-
  and b-halves from two rows of the memory (hence the two read ports);
- a smaller stage finishes in one clock.

## Partial sums, path memory and CRC

`ps_network` keeps N partial-sum bits per path. The bits that feed the G
nodes of stage s live at positions [2^s, 2^(s+1)). At the end of a sub-tree
(one clock, `upd`), each path's partial sums are handled in four steps:

1. copy them from its parent (`perm`);
2. polar-encode the M new bits;
3. while the sub-tree is a right child, XOR the encoded bits into the left
   sibling's partial sums and climb one stage;
4. at the first left child, store the result as the partial sums for that
   stage's G node.

`path_mem` keeps the N decoded bits per path, permutes them and writes the
M new bits at position jM.

After the last sub-tree, `crc_unit` runs the CRC-24 check (polynomial
0x1864CFB, zero initial value) on M bits per clock over the information
bits of every path, for N/M clocks. It outputs the passing path with the
smallest metric. If no path passes, it outputs the smallest-metric path
with `crc_ok = 0`.

## Schedule and timing

`control_unit` runs one frame in these steps:

| Phase | Clocks |
|---|---|
| PCMS | N/(2P) = 8 |
| per sub-tree j = 0 … N/M-1: SC nodes from the highest stage that changes down to stage m | max(1, 2^s/P) per node |
| per sub-tree: the tuples | 1 to 3 each |
| per sub-tree: update | 1 |
| CRC | N/M + 1 = 129 |

The first node of sub-tree j is a G node: it sits at stage m + (number of
trailing zeros of j). When that stage would be n-1, stage n-2 is used
instead and the node reads the top-stage buffers. All nodes below it are F
nodes.

At the default size, a frame of the test code takes **1302 clocks** from
`start` to `done`. The published architecture needs 516 clocks for the
same size, because it also has the following, which are **not** built
here:

- **Look-ahead in every fully-parallel stage.** Stages whose nodes fit in
  one clock also compute F, G0 and G1 together, which removes most of the
  G-node clocks. Here only the top stage uses look-ahead.
- **Latency fine-tuning.** The stage-m F computation is merged with the
  PMU of the first tuple. This saves 64 clocks at M = 8.
- **All-zero prefix.** The frozen sub-trees before the first information
  bit are skipped. This saves 18 clocks at M = 8.
- **Overheads of this RTL.** It adds the per-sub-tree update clock
  (N/M = 128 clocks) and the final CRC scan (129 clocks). The published
  figure does not count the CRC scan.

For the test code, the 1302 clocks break down as follows:

| Part | Clocks | Notes |
|---|---|---|
| PCMS | 8 | |
| SC nodes | 399 | |
| List manager | 636 | 210 SP1, 78 SP2 and 46 rate-1/T tuples |
| Update clocks | 128 | |
| CRC | 129 | |
| Start and done | 2 | |

The published 516 clocks come from a code set with fewer tuples: 224
tuples, against 334 here. Its list manager takes 430 of those clocks. The
per-node throughput of the datapath matches the published one; the cycle
count does not.

## Interface of `lscd_top`

| Port | Direction | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | Clock (rising edge); reset (asynchronous, active low). |
| `cfg_we`, `cfg_addr`, `cfg_cls` | in | Write the class of bit `cfg_addr` (`BIT_FRZ`, `BIT_URL`, `BIT_RRL`). Write only while idle. |
| `ch_we`, `ch_addr`, `ch_data` | in | Write P channel LLRs (sign-magnitude; negative means bit 1) into word `ch_addr`. Word w holds LLRs wP … wP+P-1. |
| `start` | in | One-clock pulse that starts a frame. |
| `busy` | out | High from `start` until `done`. |
| `done` | out | One-clock pulse when `dout` is valid. |
| `dout` | out | Decoded u vector: bit i is u_i, frozen bits included. |
| `crc_ok` | out | The chosen path passed the CRC. |

The size constraints are:

- N, L, M and P are powers of two;
- M ≤ P, N ≥ 4P and N ≥ 4M;
- M ≤ 64, because of the width of the polar-transform helper.

## Simulating

Each testbench is a self-checking top module in `tb/`. It prints
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lscd_pkg.sv tb/tb_lscd_top.sv \
          --top-module tb_lscd_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_lscd_top` with any other testbench name. The testbenches are:

- **Block tests** (`tb_<block>`): each compares its block against an
  independent model written in the testbench, on random or exhaustive
  stimulus.
- **`tb_lscd_top`**: six frames at N = 64, L = 4, M = 4, P = 8. It checks
  the decoded word, `crc_ok` and the clock count of every frame against a
  cycle model of the schedule. It also counts each mechanism (SP1, both
  SP2 kinds, rate-1/T, G nodes, top-stage candidate selection, DTS with a
  full list, DTS that dropped a path, lazy-copy permutations) and fails if
  any of them never happens.
- **`tb_lscd_full`**: the same test with `lscd_top` at its default
  parameters (N = 1024, L = 32, M = 8, P = 64), two frames. Building takes
  about two minutes; the run takes about a second.

The end-to-end test transmits frames with growing noise. Its code uses
K = N/2 information bits, and the most reliable half of them (by the
polarisation-weight ordering) are marked reliable. A correct final word
alone says little about the internal list handling: the correct path often
survives even when other paths are computed from wrong LLRs. The test
therefore also checks every path directly. Whenever a sub-tree's stage-m
LLRs enter the list manager, it recomputes them for every valid path, using
the quantised channel LLRs, that path's decoded bits and an integer
min-sum model, and requires a bit-exact match. This covers:

- the look-ahead top stage;
- the lazy-copy pointers and the crossbar;
- the partial sums.

The list size and tuple size are elaboration-time parameters, not run-time
modes. Two other published configurations were simulated at N = 1024
through the same test body, by instantiating `lscd_tb_core` with other
parameters. Both decoded every frame with every stage-m LLR exact:

| Configuration | Clocks per frame | Published latency |
|---|---|---|
| L = 8, M = 2 | 3486 | 943 |
| L = 16, M = 4 | 2020 | 647 |

## Departures from the published design

- **Look-ahead and latency savings.** Look-ahead is used at the top stage
  only, and the latency fine-tuning and all-zero-prefix savings are not
  built (see *Schedule and timing*). A frame takes 1302 clocks instead of
  516.
- **Partial sums in registers.** All N partial-sum bits per path are
  registers. The published design keeps P of them in registers and the
  rest in a P-bit-wide SRAM.
- **Candidate choice.** DTS candidates fill the list in index order, not at
  random.
- **PMU timing.** The PMU walks from stage m to stage t combinationally in
  its one clock, without pipeline registers between PE stages. The LM
  clock counts are the published ones, but the logic depth is larger.
- **Memory organisation.** Memory words are split into two P-LLR halves
  with their own read addresses. The channel buffer is written P LLRs per
  clock, an interface the published design does not specify.
- **Own choices.** Saturation of LLR and metric sums, CRC path choice when
  no path passes, the bit layout of the partial sums, the sorter structure,
  and the one-clock list update per sub-tree.
