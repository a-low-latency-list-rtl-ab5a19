# A low-latency list successive-cancellation decoder for polar codes

A polar code is decoded well by a *list* successive-cancellation decoder (LSCD).
It follows up to L candidate paths through the decoding tree, and a CRC picks
the winner at the end. The price is time. In the textbook form, every
information bit doubles the list to 2L candidates, and a sorter must then
choose the best L of them. That pruning step repeats hundreds of times per
codeword and sits on the critical path.

This RTL implements an LSCD for the (N, K) = (1024, 528) CRC-aided polar code
(rate 1/2 plus a 16-bit CRC) with a list of L = 16 paths. Each path has a
semi-parallel SC decoder with M = 64 processing elements. The decoder needs
**1462 clock cycles per codeword**. Three ideas make that possible:

1. **Selective expansion.** Source bits come in three kinds: frozen (known to
   be 0), *reliable* information bits and *unreliable* information bits. Only
   unreliable bits fork the list. A reliable bit is decided by hard decision in
   every path, like a frozen bit, and costs no pruning. For the default code,
   382 of the 528 information bits are reliable.
2. **Double-thresholding pruning (DTS-Advance).** The decoder never sorts 2L
   metrics. A small sorter network finds a partial order of the L current
   metrics, and the survivors are then chosen with thresholds. The whole
   pruning step takes one clock cycle, and the sorting overlaps the node
   computation before it.
3. **Couple scheduling.** Bits 2c and 2c+1 share their last tree node. For
   most combinations of bit kinds, both bits are decided in the same cycle as
   that node, with no separate leaf or pruning cycles.

The sections below follow the decoder's data flow. The pruning section is the
longest because it is the least obvious part.

## Bit kinds and the flag table

The decoder holds a table of 2 bits per source bit (`flag_rom`). The encoding
is 0 = frozen, 1 = reliable, 2 = unreliable. It is written through the top's
`flag_we / flag_addr / flag_kind` port before decoding, which selects the code
and the reliable set. Nothing else in the hardware depends on the code.

The reliable set is chosen offline. Out of the information set, the bits with
the lowest error probability are taken as reliable, so that the
union-bound BLER grows by at most a tolerance ε. Smaller ε means fewer reliable
bits, more forking and a longer latency:

| ε | reliable bits | cycles per codeword |
|---|---|---|
| 0.3 (default design point) | 382 | 1462 |
| 1 | 392 | 1424 |
| 3 | 405 | 1381 |
| 9 | 419 | 1329 |

## Schedule: one couple at a time

The control unit (`control_unit`) walks the decoding tree depth first, one
couple (u[2c], u[2c+1]) at a time, and issues one operation per clock cycle.

- **Node cycles.** The nodes above couple c run from stage s down to stage 1.
  For c = 0, s = n−1 and all nodes are f nodes. Otherwise s = ctz(2c): the first
  node is a g node and the rest are f nodes.
- **Node cost.** A node at stage t holds 2^t outputs, so it takes
  max(1, 2^t / M) cycles, one word of M outputs per cycle.
- **Couple finish.** What follows the stage-1 node depends on the couple's
  case:

| case | u[2c], u[2c+1] | what happens after the stage-1 node | cycles saved |
|---|---|---|---|
| I | reliable, reliable | nothing: both bits decided in the node's cycle | 4 |
| II | frozen, reliable | nothing | 4 |
| IV | frozen, frozen | nothing | 4 |
| III | unreliable, reliable | leaf 0, prune, leaf 1 | 1 |
| V | frozen, unreliable | leaf 0, leaf 1, prune | 1 |
| VI | unreliable, unreliable | leaf 0, prune, leaf 1, prune | 0 |

"Cycles saved" is measured against a plain LSCD, which spends 4 cycles per
couple: two leaves and two prunings. The resulting latency is

    D = 3N + (N/M)·log2(N/4M) − 4·(N_I + N_II + N_IV) − (N_III + N_V)

For N = 1024 and M = 64, the first two terms give 3072 + 32 = 3104 cycles. With
the default code's couple counts (158, 0, 66, 224, 48, 16) this gives 1462.

Two other kind pairs are possible in principle: reliable then frozen, and
reliable then unreliable. These are not among the six cases, and a good code
construction does not produce them. They are still decoded correctly, as
leaf 0, leaf 1, plus a prune after each unreliable bit.

`busy` is high for exactly D cycles after `start`. `done` rises in the next
cycle.

## The SC datapath and its memories

Each path has its own SC datapath. The `scd_module` holds L copies of
`scd_core`, each with M `llr_pe` elements. A PE computes either:

- f(a, b) = sign(a)·sign(b)·min(|a|, |b|), or
- g(a, b, s) = b + (1 − 2s)·a, saturated to ±31.

LLRs are 6-bit two's complement. All L cores run in lockstep on the same node.

**Operand alignment.** Stage t+1 holds 2^(t+1) LLRs, and a stage-t node
combines LLR j with LLR j + 2^t:

- When 2^t ≥ M, these are two different memory words, A and B, and PE j takes
  (A[j], B[j]).
- For smaller nodes, both halves sit in one word, and PE j takes
  (A[j], A[j + 2^t]).

**LLR memory (`llr_memory`).** It has three parts:

- **Channel memory.** The channel LLRs are stored once, as N/M words, and
  shared by all paths.
- **Banks.** Each path has a bank (`llr_sram`) holding the words of stages
  1 … n−1. At the defaults this is 20 words of 384 bits.
- **Pointer memory.** This is the register table `ptr[l][t]`, with L × (n−1)
  entries of log2 L bits. `ptr[l][t]` says which bank holds the stage-t LLRs
  that path l must use.

Pruning moves no LLR words. This is the lazy copy:

- When path l writes stage t, it writes its own bank and sets `ptr[l][t] = l`.
- When pruning makes path l a continuation of parent p, path l takes over the
  whole pointer row: `ptr[l][*] ← ptr[p][*]`.
- A crossbar then hands SCD l the two operand words from bank `ptr[l][t+1]`,
  or from the channel memory at stage n.

Path l may therefore read another path's bank until it first overwrites that
stage itself. This is correct because a bank's stage-t content only changes
when its owner writes a new stage-t node. At that moment, every path pointing
to that content has already moved past it in the tree.

**Partial sums (`partial_sum_memory`).** For every path and every stage t, the
memory keeps the 2^t re-encoded bits that the g nodes at stage t need. Total
storage is N − 1 bits per path.

- When a couple is decided, the pair is re-encoded, [u0⊕u1, u1].
- The result is then combined upward, x = [left ⊕ x, x], for as long as the
  couple ends a right subtree.
- On pruning, whole rows are copied from the parent through an L × L
  crossbar of registers.

**Path memory (`path_memory`).** It stores the K decided information bits of
each path. Frozen bits are not stored. Rows are copied on pruning, like the
partial sums.

## Path metrics and decisions

Each path carries an 8-bit unsigned metric γ. Lower is better, and the metric
saturates at 255. The `pmu` evaluates every update the schedule can ask for:

- **Unreliable leaf with LLR Λ.** The leaf produces two extensions:
  - the even extension PME: the hard decision Θ(Λ), with metric γ unchanged;
  - the odd extension PMO: the complemented decision, with metric γ + |Λ|.

  The PMO values and decisions are registered in the leaf cycle. The prune
  happens in the next cycle.
- **Reliable leaf.** The decision is Θ(Λ) and the metric does not change.
- **Frozen leaf.** The decision is 0, and the metric grows by |Λ| if Λ < 0.
- **Fused couples.** These are decided in the stage-1 node cycle, from the
  two stage-1 LLRs L0 and L1:
  - Case I: (u0, u1) = (Θ(L0) ⊕ Θ(L1), Θ(L1)). The metric is unchanged.
  - Case II: u0 = 0 and u1 = Θ(L0 + L1). The metric grows by
    min(|L0|, |L1|) when the signs of L0 and L1 differ.
  - Case IV: both bits are 0. The metric grows by |L0| for L0 < 0 and by
    |L1| for L1 < 0.

## Pruning without sorting 2L metrics

An unreliable bit gives 2L candidates:

- L even extensions, whose metrics γ_l are the current ones;
- L odd extensions γ_l + |Λ_l|, each no better than its even sibling.

Pruning keeps L of the 2L. The hardware for this lives in the list-management
block (`lm_module`): `tta` → `dts` → `lazy_copy`.

**Threshold-tracking architecture (`tta`).** It orders only the L *current*
metrics, in three steps:

1. Paths 0 … L/2−1 and paths L/2 … L−1 are each sorted by an L/2-input sorter
   (`radix_sorter`), giving d0 and d1, both ascending.
2. L/2 compare-and-swap cells pair d0[j] with d1[L/2−1−j]. Each cell puts the
   smaller value in upper slot j and the larger in lower slot L/2−1−j. Every
   upper value is then ≤ every lower value. The upper half holds the L/2 best
   paths, in no particular order.
3. A third sorter sorts the lower half exactly.

This gives a partial order `ord[0..L−1]` with two thresholds:

- AT = the metric at position L/2;
- RT = the metric at position RT_IDX. The default is 11, the twelfth best of
  16.

The sorters compare all pairs of inputs and route each value by its rank.
Ties go to the lower input position.

The TTA runs every cycle on the registered metrics. Its result is also
registered, so it is taken from the leaf cycle, in which unreliable leaves
leave the metrics unchanged. The pruning cycle only reads it.

**DTS-Advance (`dts`).** It picks the survivors in four steps:

1. Both PME and PMO are permuted into TTA order.
2. Slots 0 … L/2−1 keep the even extensions of the L/2 best paths. Their
   metrics are at most AT, and no odd extension can beat all of them.
3. Slots L/2 … L−1 start with the even extensions of the remaining paths, in
   ascending order.
4. L comparators flag every odd extension with PMO ≤ RT, and an accumulator
   counts the flags, k. With kk = min(k, L/2), the last kk slots (the worst
   even extensions) are replaced by the first kk flagged odd extensions, in
   TTA order.

Each survivor is described by its parent path, an odd flag and its new
metric.

This is not the exact best-L selection:

- An odd extension can win over a worse even extension only if it lies at or
  below RT.
- When more than L/2 odd extensions are flagged, the choice among them follows
  the partial order, not their values.

The published error-rate results show a negligible loss against exact sorting
with RT at the twelfth metric. `RT_IDX` selects a different position.

**Lazy-copy control (`lazy_copy`).** It turns each survivor into a parent
index `parent[l]` and a new bit, the parent's decision xor the odd flag.
These drive:

- the pointer-memory update;
- the crossbars of the partial-sum memory, the path memory and the CRC
  registers.

**The commit bundle.** Every decision leaves the list-management block on one
bundle of signals, the `commit_if` interface. It is shared by the
partial-sum memory, the path memory and the CRC unit, and carries:

- the enable;
- whether this is a pruning step;
- which bit(s) of the couple are committed;
- whether each is an information bit;
- the information-bit position;
- the parents and the two decision vectors.

**Start of a codeword.** Path 0 starts with metric 0 and the other L−1 paths
with metric 255. The first unreliable bits therefore fill the list through
the same pruning logic, because the even extension of a 255 path always
loses. No special fill-up mode exists.

## CRC and the output

`crc_check` keeps a 16-bit CRC register per path (polynomial
x^16 + x^12 + x^5 + 1, initial value 0). It absorbs each path's information
bits as they are decided, one or two per cycle. On pruning, each path first
takes its parent's register. A path passes when its register is 0 after all K
bits, which means the last 16 information bits carry the CRC of the first 512.

At the end, the output is the path with the smallest metric among those that
pass. If none passes, it is the path with the smallest metric overall, and
`crc_ok` is 0. `dec_bits` then shows that path's K information bits, with
bit 0 decided first.

## Using `lscd_top`

Parameters:

| parameter | default | meaning |
|---|---|---|
| N | 1024 | code length |
| K | 528 | information bits including CRC |
| L | 16 | list size |
| M | 64 | PEs per SC decoder |
| Q | 6 | LLR width |
| PMW | 8 | path metric width |
| R | 16 | CRC length |

Sequence:

1. **Reset.** Hold `rst_n` low for at least one clock.
2. **Flags.** Write the N bit kinds, one per cycle.
3. **Channel LLRs.** Write the LLRs, one word of M per cycle. Word w holds
   LLRs wM … wM+M−1. Positive values favour 0, and magnitudes must be at
   most 31.
4. **Start.** Pulse `start` for one cycle while not busy.
5. **Result.** `busy` stays high for D cycles. Then `done` rises, and
   `dec_bits` and `crc_ok` are valid until the next start.

The channel and flag memories keep their contents between codewords.

Storage at the defaults:

| memory | size |
|---|---|
| LLR banks | 16 × 20 × 384 = 122,880 bits |
| channel words | 6,144 bits |
| pointer memory | 16 × 9 × 4 = 576 bits |
| partial sums | 16 × 1023 bits |
| paths | 16 × 528 bits |

## Where this RTL departs from the published design

- **LLR bank size.** Each bank holds exactly the words its stages need: 20
  words at the defaults. The published design sizes a bank for the memory
  layout of an earlier SC decoder, (N + 2mM)·Q bits. No behaviour changes.
- **Partial sums.** They take N − 1 bits per path instead of N/2. The smaller
  partial-sum network is not described in enough detail to build, so every
  stage's partial sums are kept.
- **Memory reads.** They are combinational: a node word is read, computed and
  written back in one clock. A real SRAM macro would need a pipeline stage,
  which the published cycle counts do not show.
- **Flag table.** It is a writable register table, not a ROM, so that several
  codes and ε values can be run on one build.
- **Design's own choices.** The published design leaves these open, so the
  following were chosen here:
  - the CRC polynomial;
  - metric saturation;
  - the list start;
  - the output rule;
  - the sorter structure;
  - the order in which the flagged odd extensions fill the slots;
  - the tie rules;
  - the handling of couple types outside the six cases;
  - the load, start and result interface.
- **Not built:** the SRAM macros of the target process. The banks are written
  as arrays.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
prints `TB_RESULT checks=… failures=…` and has a watchdog. Highlights:

- **`tb_lscd_top`** runs a reduced decoder (N = 128, K = 72, L = 8, M = 8) over
  many codewords. A behavioural reference list decoder inside the testbench
  keeps a full LLR array per path and copies it on pruning, with no pointers.
  It applies the same selection rules as plain sequential code. Each codeword
  is checked for:
  - the decoded bits, the CRC flag and all L final metrics;
  - the cycle count, against the formula above.

  The testbench also counts each mechanism and fails if one never occurs:
  - every couple case;
  - pruning with k below and above L/2, and with k = 0;
  - real path copies;
  - candidates failing the CRC.
- **`tb_lscd_full`** does the same at the default parameters. It decodes one
  codeword with each of the four ε couple layouts and checks 1462, 1424,
  1381 and 1329 cycles. It also decodes twelve codewords of a constructed
  (1024, 528) code over a simulated AWGN channel.
- **Unit tests.** These compare:
  - the PE against integer arithmetic, exhaustively;
  - the sorter and TTA against properties of a sorted list;
  - DTS against an independent model of the algorithm;
  - the control unit cycle by cycle against a schedule generated from the
    rules above;
  - the LLR memory against a model that copies data instead of pointers.

To run a testbench with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/lscd_pkg.sv rtl/*.sv \
        tb/tb_lscd_full.sv --top-module tb_lscd_full -Mdir obj_full
    ./obj_full/Vtb_lscd_full

Replace `tb_lscd_full` with any other testbench name. The full-size build
takes about a minute, and the simulation itself takes under a second.

Error rates were not measured. A BLER curve needs millions of codewords, and
the testbenches decode tens. They show that the hardware decodes exactly as
the algorithm it implements.
