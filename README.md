# SR-List decoder for 5G NR polar codes — RTL description

This is a synthesizable SystemVerilog model of a successive-cancellation list
(SCL) decoder for the polar codes of 5G NR, built around *sequence-repetition*
(SR) nodes. A plain SCL decoder walks the whole binary decoding tree of a
polar code bit by bit, and splits every path in two at each information bit.
This decoder instead cuts the tree into sub-trees ("nodes") of up to 32 leaves
whose frozen-bit pattern has a known structure, and it decodes each one in a
handful of clock cycles:

| node   | frozen pattern (leaves of the sub-tree) | decoded as |
|--------|-----------------------------------------|------------|
| R0     | all frozen                              | all zero; path metric (PM) penalty only |
| REP    | all frozen except the last              | repetition code: one decision per path |
| R1     | none frozen                             | hard decisions plus a few bit-flip forks |
| SPC    | only the first frozen                   | single parity check (Wagner decoding) |
| TYPE-III | first two frozen                      | two interleaved parity checks (even and odd positions) |
| SR     | a chain of R0/REP left children ending in an R1/SPC/TYPE-III right child | see below |

An SR node of stage `s` (2^s leaves) is a node whose leftmost descendants are
R0 or REP nodes and whose rightmost descendant, the *source* node at stage
`r < s`, is of the R1/SPC/TYPE-III family (a generalized parity-check node,
G-PC). Its code word is the source code word repeated 2^(s-r) times, with each
copy possibly inverted. The set of allowed inversion patterns (the
*repetition sequences* `S^k`) is small: one bit per REP left child, none per
R0 left child. Decoding an SR node therefore means, for every path and every
sequence: fold the 2^(s-r) copies of the node's LLRs into one source vector
(adding or subtracting, according to the sequence), decode the short G-PC
source, and charge the PM with the disagreement. The decoder keeps the `L`
best of the `|S|·L` candidates and then finishes the source with ordinary
G-PC list decoding.

The main configuration is the downlink (PDCCH) decoder:

| quantity | value | where |
|---|---|---|
| largest mother code `N` | 512 (`N_LOG = 9`) | `srl_decoder` parameter |
| list size `L` | 8 | `srl_decoder` parameter |
| repetition sequences per SR node `|S|max` | 4, so `s − r ≤ 2` | `srl_pkg::S_MAX` |
| frozen bits in a G-PC source `Np` | 0, 1, 2 | `srl_pkg` |
| largest node `Ns,max` | 32 leaves | `srl_pkg::NS_MAX` |
| SC unit | 2 stages, 64 PEs per path in the first stage | `srl_pkg::SCU_STAGES`, `NPE` |
| LLR | 6 bits, 2 fractional (Q6.2), saturated to ±31 | `LLR_W` |
| path metric | 7 bits, integer (Q7.0), saturating | `PM_W` |
| path-fork limits `T_R1, T_SPC, T_TYPE-III` | 2, 3, 3 | `srl_decoder` parameters |

For `L = 8` a `(512,164)` code (140 message bits plus a 24-bit CRC) takes
181 clock cycles from `start` to `dec_valid` in simulation, 9 of them for the
final CRC check.

## Block diagram

```
            llr_wr_*                     instr_*
               |                            |
        channel LLR mem               instruction FIFO
               |                            |
               +----> SC unit <----- controller ------> CRC unit --> u_out
               |     (2 stages)        |    |              ^
       internal LLR mem <--------------+    |              |
       (L banks, pruned) <- pointer mem     v              |
               |                        node processing   Us memory
               +------------------->   unit (NPU)  ------> PSUM unit
                                       RSU -> BNU  ------> PM memory
```

All `L` paths move in lock step. In each cycle the controller either runs
one chunk of an SC-unit step, waits for the NPU, updates the list after a
node, or runs the CRC check. There is no overlap between the steps.

## The instruction stream

The decoder does not walk the tree itself. The tree walk depends only on the
code (its frozen set), so it is compiled beforehand into a list of
instructions. These are pushed into the instruction FIFO (`instr_valid/ready`),
and the decoder executes them in order. Each instruction is a packed
`srl_pkg::instr_t` (30 bits):

| field | OP_SCU | OP_NODE |
|---|---|---|
| `op` | compute child LLRs | decode a node |
| `stage` | stage the LLRs are read from | node stage `s` |
| `nst` | 1 (child) or 2 (grandchild) | – |
| `fg` | f/g per SCU stage, bit 0 = first stage | – |
| `ntype` | – | R0, REP, R1, SPC, T3, SR |
| `sd` | – | `s − r` for SR nodes (1 or 2) |
| `v` | – | left children of an SR node: `v[t]` = 1 if the left node at stage `s−t−1` is REP, 0 if R0 |
| `np` | – | frozen bits of the (SR source) G-PC node |
| `base` | – | index of the node's first leaf |

`OP_END` closes a code word and starts the CRC check.

A compiler (the end-to-end testbench contains one, `decode_node` and
`build_code` in `tb/tb_srl_decoder.sv`) walks the tree depth-first:

1. Sub-trees made only of frozen leaves *before the first information bit*
   are skipped outright. Their partial sums are zero, which the cleared
   partial-sum memory already holds.
2. Any sub-tree of at most 32 leaves that matches a node type is emitted as
   one `OP_NODE`. SR nodes are tried with `s − r = 1` and `2`.
3. Otherwise, for each child (left, then right) of the node at stage `s`:
   if the child's stage `s−1` is kept in the internal LLR memory, and the
   child is itself a node (or its own children's stage `s−2` is not kept),
   a one-stage `OP_SCU` (`f` for the left child, `g` for the right)
   computes the child and the compiler recurses into it. Otherwise the
   compiler skips the child stage. It emits, for each of the two
   grandchildren, a two-stage `OP_SCU` from stage `s` that recomputes the
   child LLRs on the fly and writes only the grandchild. Each grandchild is
   then handled in turn. A skipped frozen prefix also drops the matching
   SCU steps.

The channel LLR memory may be overwritten with the next code word as soon as
the `g` step at the root has been read. `chan_free` signals this point.

## LLR storage: what is kept, and where

This is the least obvious part of the design.

**Channel LLR memory** — 512 LLRs, written 64 per cycle
(`llr_wr_blk` selects the block).

**Internal LLR memory** — one bank per path. A bank does not hold every
stage of the tree. It keeps:

* stages 0 … 5: nodes of up to 32 leaves are decoded from these, so every
  one may be needed;
* above that, only every second stage counting down from the root.
  For `N = 512` this is stage 7. Stage 8 and stage 6 are never stored,
  because a two-stage SC-unit step produces them internally and passes them
  straight into its second PE stage.

This gives 1 + 2 + … + 32 + 128 = 191 LLRs per bank instead of 511. The rule
is `srl_pkg::stage_stored`, and `stage_off` gives the offset of a stage's
vector within the bank.

**Pointer memory** — after a node, survivor `p` may descend from any parent
path `origin[p]`. Copying the parent's LLR vectors would cost many cycles.
Instead `ptr[l][t]` records which bank holds path `l`'s LLRs of stage `t`.

* When the SC unit writes stage `t`, every path writes its own bank, and
  `ptr[l][t] ← l`.
* After a node, `ptr[p][*] ← ptr[origin[p]][*]`.

So the survivors share their parents' LLRs until they compute their own.
This is safe because an SC-unit step writes stage `t` for all paths at
once, so every pointer of that stage is renewed in the same cycle, and a
step never reads the stage it writes.

**Partial sums (PSUM unit)** — the `g` function needs, for each path, the
bits of the left sibling re-encoded at the sibling's stage. The PSUM memory
keeps one vector of 2^t bits per stage `t` and path. After a node of stage
`s` with first leaf `base`, each survivor copies its parent's PSUM memory.
The node's output `beta` then walks up the tree, stage by stage:

* where bit `t` of `base` is 0 (a left child), the vector is stored at
  stage `t` and the walk stops;
* where it is 1 (a right child), it is combined with the stored left sibling
  as `(left ⊕ right, right)` and continues one stage up.

All of this is one combinational path and takes a single clock cycle,
whatever the number of stages climbed.

**Us memory** — holds the decoded bits `u` of each path, one row of `N` bits.
A node's output `beta` is re-encoded with the polar transform of its size,
which gives its `u` bits. These go into the row at positions
`base … base+2^s−1`. Rows are copied from the parent at the same time.

**PM memory** — `L` metrics and `L` validity flags. At the start only path 0
is valid.

## SC unit

The SC unit holds `L × 64` processing elements in its first stage and
`L × 32` in its second. A PE computes

* `f(a,b) = sign(a)·sign(b)·min(|a|,|b|)` (min-sum), or
* `g(a,b,z) = b + (1−2z)·a`, saturated to ±31.

A one-stage step reads the parent vector and produces up to 64 child LLRs per
cycle. A two-stage step produces 32 grandchild LLRs per cycle. The first stage
computes the child LLRs the grandchildren need, and the second stage takes
them directly, with `z2` from the partial sums of stage `s−2`.

Steps with more outputs than lanes take `2^(s−nst)/lanes` cycles (*chunks*).
For example, the root `f` step at `N = 512` takes 4 cycles (256 outputs / 64).

## Node processing unit

The NPU has two parts. An SR node first goes through the repetition-sequence
unit (RSU), which resolves the R0/REP part and selects `L` candidates. Its
result is then loaded into the basic node unit (BNU), which decodes the G-PC
source. Every other node goes to the BNU directly.

### RSU (two cycles)

**Cycle 1 — sequence extension.** For each path `l` and each sequence `k`:

* *Fold.* The source LLRs are
  `λr[j] = Σm (1 − 2·S^k[m]) · λs[2^r·m + j]`.
  A two-level adder tree computes this, and the level is chosen by `s − r`.
  The sums grow to 8 bits, so no saturation is needed.
* *Penalty.* Re-expand the hard decisions of `λr` with the sequence. Add the
  `|λs|` of every position where this disagrees with the sign of `λs`.
* *G-PC data.* Find the smallest `|λr|` (overall, over even indices, over odd
  indices), with its index. Also find the parities of the hard decisions.

These results are registered.

**Cycle 2 — sequence sorting.** The candidate metric is

`PM = PM_l + penalty + Δ`

Δ is the cost of satisfying the source's parity checks: 0 for R1,
`γ·min|λr|` for SPC, and the sum of the even and odd terms for TYPE-III.
Sequences that are not allowed get the largest key; these are those with a
bit set where the left node is R0, and those of invalid parent paths.

A partial rank-order sorter picks the `L` smallest of the `4L = 32` keys. It
is built from two 16-input rank-order sorters (one ascending, one
descending), followed by 8 pairwise minimum selectors. This is the first half
of a bitonic merge. The `L` results are the `L` smallest but are *not* in
order; nothing downstream needs them sorted, and leaving out the ordering
network is what makes the sorter small. Ties go to the lower index.

### BNU

The BNU holds per-path state: LLRs, the current decision vector, the parity
groups (parity `γ`, least-reliable index `ε` and magnitude), the set of
positions already forked on, PM, validity, parent and sequence index.

Latency from `start`, with `F = min(T_type, K)` forks (`K` = information bits
of the node or source):

| node | cycles | what happens |
|---|---|---|
| R0 | 1 | PM += Σ|λ| over negative LLRs |
| REP | 2 | PM of both values, 2L → L sort |
| R1 | 1 + F | find first fork position, then F forks |
| SPC, TYPE-III | 2 + F | Wagner fix of the parity (flip the least-reliable bit of each violated group, PM += its magnitude), then F forks |
| SR with R1 source | 2 + F | RSU, then F forks |
| SR with SPC/TYPE-III source | 3 + F | RSU, parity fix, then F forks |

One more cycle follows every node. In it the controller writes the PSUM, Us,
pointer and PM memories.

**Fork `j`.** For each path, a compare-and-select tree has already picked the
not-yet-visited position `i` with the smallest sorting metric. For R1 the
metric is `ζ[i] = |λ[i]|`. For SPC/TYPE-III it is
`ζ[i] = |λ[i]| + (1 − 2γ)|λ[ε]|`, which is the cost of flipping `i` and then
re-satisfying the parity by flipping `ε` as well. The metric is fixed before
the first fork, so the tree only needs the minimum each cycle rather than a
full sort. The `ε` positions themselves are excluded.

Each path yields two candidates:

* keep the path as it is;
* flip bit `i` (and `ε` for a parity node), at a cost of `ζ[i]` added to the
  PM; `γ` then toggles.

The 2L candidates go through a 2L → L partial sorter of the same kind as the
RSU's.

Only `F` forks are made, not `L − 1`. For list size 8 these limits
(`T = 2, 3, 3`) were found not to cost error-rate performance on the 5G
codes. After the last fork, the smallest PM is subtracted from all PMs, which
keeps 7 bits enough.

For an SR node, the final node output is the source decision repeated with the
chosen sequence: `βs[2^r·m + j] = βr[j] ⊕ S^k[m]`.

## CRC selection

After `OP_END`, the CRC unit checks all `L` rows of the Us memory at once:

* It clocks the information positions (`info_mask`, in index order) through a
  24-bit LFSR, 64 positions per cycle (CRC-24C, generator `0xB2B117`, zero
  initial value).
* It takes the valid path with the smallest PM among those whose remainder is
  zero. If none passes, it takes the smallest-PM path.
* The chosen row appears on `u_out` with `dec_valid`, and `crc_ok` tells
  whether the check passed.

The check takes 512/64 + 1 = 9 cycles, plus one for the `OP_END` instruction.

## Timing

From `start` to `dec_valid`:

`cycles = Σ over SCU steps of their chunk count + Σ over nodes of (NPU latency + 1) + 2^N_LOG/64 + 2`

If the instruction FIFO runs empty, the decoder stalls (`stall`) and the
count grows by the stall cycles. The end-to-end testbench checks this formula
exactly, frame by frame.

## Where this RTL departs from the published design

* **Frozen sets and rate matching.** The testbenches build codes from a
  beta-expansion reliability order, not the 3GPP sequence. They apply no
  puncturing or shortening, so the published worst-case of 173 cycles
  (`E = 432`, 140 message bits, with rate-matching-aware node selection) is
  not reproduced exactly; the comparable `(512,164)` code here takes 181
  cycles. The decoder itself is unaware of rate matching: that lives only in
  the instruction list and the channel LLRs.
* **LLR format.** Values are held in two's complement saturated to ±31. This
  is the same set of values as the 6-bit sign-magnitude format of the
  original.
* **RSU routing.** The bit-reversal permutation in front of the RSU's adder
  tree is replaced by direct index selection with the same result.
* **CRC.** The downlink CRC interleaver and RNTI scrambling are not modelled.
* **Instruction set, host interface, FIFO depth (512), reset and stall
  behaviour** are this design's own choices.
* **Which upper stages are stored** (every second one from the root) is this
  design's choice of pruning rule.
* **Memories** are written as register arrays with combinational reads, not
  SRAM macros.
* **Sizes.** Only `L = 8`, `|S|max = 4`, `N ≤ 512` is simulated. `L` and
  `N_LOG` are parameters. `|S|max = 8` (`s − r = 3`) is not built. The uplink
  variant (`N = 1024`) needs `N_LOG = 10`, which is not simulated.

## Verification

Every block has a self-checking testbench in `tb/` that compares against a
reference computed inside the testbench from random inputs (`$urandom`). Each
prints `TB_RESULT checks=… failures=…`. Examples:

* the f/g PE against the formulas;
* the SC unit and memories against behavioural arrays;
* the partial sorter against a reference selection;
* the RSU against every (path, sequence) candidate worked out in the
  testbench: it must offer the `L` candidates of smallest metric;
* the BNU and NPU by properties that do not depend on their algorithm. Each
  output must be a code word of the node. Its metric must equal the parent's
  metric plus the disagreement cost, up to the common normalisation. No two
  outputs may repeat. The cycle count must match the latency table;
* the CRC unit against a bitwise CRC;
* the controller against a scripted instruction stream.

`tb_srl_decoder` runs the whole decoder at its default parameters:

* codes of 128, 256 and 512 bits, noiseless and over AWGN;
* the decoded message, `crc_ok` and the exact cycle count are checked;
* it counts, and fails if it never sees, each mechanism: every node type, SR
  nodes with each source and with one or two folded stages, REP left parts,
  one- and two-stage SCU steps, skipped frozen prefixes, FIFO stalls, early
  channel-memory release and path forks.

To simulate one testbench with Verilator (5.x):

```
verilator --binary --timing -Wno-fatal -Irtl rtl/srl_pkg.sv $(ls rtl/*.sv | grep -v srl_pkg) \
          tb/tb_srl_decoder.sv --top-module tb_srl_decoder -o sim && ./obj_dir/sim
```

For another block, use its testbench as the top module. `srl_pkg.sv` must come
first. `-Wno-fatal` keeps Verilator going past the integer-width
warnings that some testbenches raise (the RTL builds without them).

## Files

`rtl/srl_pkg.sv` holds the constants, the instruction format, the f/g,
saturation and polar-transform functions, and the LLR storage map. Every
other file in `rtl/` holds one module named after it:

* `fg_pe`, `scu`
* `channel_llr_mem`, `internal_llr_mem`, `pointer_mem`, `pm_mem`
* `psu`, `us_mem`
* `partial_rank_sorter` and its helper `full_rank_sorter`
* `rsu`, `bnu`, `npu`
* `instr_fifo`, `crc_unit`, `controller`
* `srl_decoder` (top)

`tb/tb_<module>.sv` is the testbench of each.
