# List successive-cancellation decoder for polar codes

A polar code of blocklength N is decoded bit by bit: successive cancellation
(SC) estimates u_1, then u_2 given u_1, and so on, walking a butterfly graph of
log2(N) stages of likelihood updates. A single wrong early decision can never be
undone. *List* SC decoding keeps the L most likely decision paths alive instead
of one: at every information bit each path is extended both ways, and the L best
of the 2L extensions survive. The price, in a naive implementation, is that a
surviving path that was duplicated needs its own copy of every intermediate
likelihood of its parent, a large block copy after almost every bit.

This RTL implements a list SC decoder in which **no likelihood is ever copied**.
Every path writes the likelihoods it computes into its own memory, and a tiny
*pointer memory* (L x (log2 N - 1) entries of ceil(log2 L) bits; 18 bits for
N = 1024, L = 2) records, for every path and stage, which path's memory holds
the values that path must read. Duplicating a path copies a row of pointers,
plus the small partial-sum and decided-bit memories, through crossbars in one
clock cycle.

The default configuration is the (1024, 512) code with list size L = 2, P = 64
processing elements per path, and 3-bit channel values. One codeword takes 2592
cycles (1024 x 459 MHz / 2592 = 181 Mbit/s coded at the clock rate reported for
a 90 nm synthesis of this architecture; no timing has been measured for this
RTL).

## Likelihood format

The decoder works on **negative log-likelihoods** (LLs), a pair {LL(x=0),
LL(x=1)} per node, not on log-likelihood ratios. LLRs lose the absolute scale
that path metrics need. With LLs the stage-0 value of a path is already its path
metric: -ln P(y, u_1..u_{i-1} | u_i), so the metric needs no separate
accumulation. Smaller is better.

* Channel input: LL(x) = (y - mu(x))^2 with mu(x) = 1 - 2x, quantised with
  step 1 and saturated to Q_ch = 3 bits (0..7). The additive constants of the
  exact Gaussian LL are dropped because they do not change how paths are
  ordered.
* Node updates, with a = the pair from the upper half and b = the pair from the
  lower half of the stage above:
  * f: (min(a0+b0, a1+b1), min(a1+b0, a0+b1)). This is the min* of the exact
    rule without its ln(1 + e^-|x-y|) correction.
  * g: (a[u] + b0, a[!u] + b1), where u is the node's partial sum.
* **Widths grow by one bit per stage** instead of saturating. Stage s (2^s
  nodes, s = log2 N is the channel) stores Q_ch + log2 N - s bits. The
  processing elements are Q_max = Q_ch + log2 N = 13 bits wide. An f or g sum
  of two stage-(s+1) values always fits the stage-s width, so there is no
  overflow logic anywhere and quantisation of the channel is the only loss.

## Architecture

```
             +-------------------- control unit ---------------------+
             | counters k(=i-1), s, p_s | f/g + stage | addresses | A^c |
             +--------------------------------------------------------+
 LL in ──> channel memory ──┐
           LL memory 0 ─────┤      ┌─ mux 0 ─> core 0 (P PEs) ─┐
           LL memory 1 ─────┼──────┤                           ├─> Reg ─> sorter
              ...           │      └─ mux L-1 ─> core L-1 ─────┘            │
                            │            ^ pointer memory <─────────────────┤
           partial sums 0..L-1 (crossbar copy) <────────────────────────────┤
           path memories 0..L-1 (crossbar copy) ──> decoded bits <──────────┘
```

| Module | Role |
|---|---|
| `lsc_decoder` | top level, wiring of everything below |
| `lsc_controller` | counters k, s, p_s; f/g choice; memory addresses; frozen-bit handling; selection cycle |
| `lsc_frozen_memory` | frozen-bit mask (the complement of the information set), loadable |
| `lsc_channel_memory` | N channel LL pairs, one copy shared by all paths |
| `lsc_ll_memory` | intermediate LLs of one path, stages 0..log2 N - 1, built from `lsc_stage_ram` |
| `lsc_ll_mux` | chooses, for one core, the LL memory named by the pointer memory, or the channel memory |
| `lsc_decoder_core` / `lsc_pe` | P processing elements computing f or g |
| `lsc_psum_memory` | partial sums of one path, with update logic and crossbar copy |
| `lsc_path_memory` | decided bits of one path, with crossbar copy |
| `lsc_pointer_memory` | which LL memory holds each path's values, per stage |
| `lsc_metric_sorter` | metric register and radix-2L sorter choosing the L best candidates |
| `lsc_pkg` | default sizes, PE-function and controller-state types |

All L cores run in lock step on the same stage and part. Only the data they
read differs. Every LL memory therefore has one read port with a common
address, and the L multiplexers after the memories do the path-specific
routing.

## Schedule of one bit

Bit index k = i - 1 (0-based) needs the stages from s0 down to 0 to be updated.
For k = 0, s0 = log2 N - 1. Otherwise s0 is the position of the lowest set bit
of k; the stages above it still hold valid values from earlier bits. Stage s
uses g if bit s of k is 1 and f otherwise. It reads stage s + 1 and writes
stage s. A stage with 2^s nodes takes max(1, 2^s/P) cycles ("parts" p_s). In
part p it reads rows p and p + 2^s/P of the stage above. Below P nodes, it reads
the two halves of the single row.

After stage 0:

* **frozen bit** (and not the last bit): every path takes u = 0. Its partial
  sums and decided bits are updated in that same cycle, and the next bit starts
  on the next cycle.
* **information bit, or the last bit**: the 2L stage-0 LL pairs are captured
  in the metric register. The following cycle is the **selection cycle**: the
  sorter ranks the 2L candidates, and all state memories commit the choice at
  its end. The register shortens the critical path at the cost of this idle
  cycle.

Summed over all bits, this gives
`sum_s (N/2^s) * max(1, 2^s/P) + (selections)` cycles. For N >= 4P that equals
`2N + (N/P) log2(N/(4P)) + R N` when the last bit carries information: 2048 +
32 + 512 = 2592 for the default code. `done` rises one cycle later.

## Why the pointer memory is enough

While stage s is computed, core l writes memory l and sets pointer (l, s) := l.
Every path computes the same stages for a given bit. So after bit k, every
path's pointers for stages s0..1 point to itself, and the stages above s0 keep
whatever they pointed to before.

At the selection cycle, new path l has parent l_p(l). Copying pointer row l_p(l)
into row l makes path l read its parent's values for every stage, wherever the
parent found them. When bit k + 1 starts at stage s0', each core reads stage
s0' + 1 through its pointer, so possibly from another path's memory. It writes
only stage s0' of its own memory. No memory is read and written at the same
stage in the same bit, and the stage being written is recomputed by every path.
So no path can overwrite values another path still needs.

Stage 0 is never read, so it needs no pointer. The channel stage is shared, so
it needs none either. That leaves log2 N - 1 rows.

The decoder starts with a single path. Path 0 is the only *live* path; the
others compute the same values but rank behind every live candidate until
selection has filled the list. Without this, identical copies of path 0 would
crowd out the real alternatives at the first information bit.

## Partial sums

A g update at stage s needs, for each of its 2^s nodes, one bit of the polar
encoding (x = u F^{(x)s}, F = [1 0; 1 1]) of the 2^s decisions in the upper half
of the current 2^{s+1}-bit block. `lsc_psum_memory` keeps exactly these bits:
2^s per stage, N - 1 in total.

Committing decision u for index k walks up from stage 0 with a block c = u. As
long as bit s of k is 1, the block of stage s is complete and is merged with the
stored upper half into a block twice as long: the upper half becomes stored xor
c, the lower half stays c. At the first stage s where bit s of k is 0, the block
is stored. The walk starts from the state of the parent path, selected through
the crossbar, so copying and updating happen in the same cycle.

## Path selection

The sorter ranks the 2L candidates (candidate c = 2l + u) with one comparator
per pair, 2L(2L-1)/2 in all. A candidate's rank is the number of candidates that
beat it. Output slot r receives the candidate of rank r, so **slot 0 always
holds the best path**, and after the last bit path 0 is the decoded word.

The ordering key is: live before dead, then smaller metric, then lower candidate
index. The tie rule is this design's own; any fixed rule works, but a reference
model must use the same one to match bit for bit.

## Storage

For the default size the LL storage is 2NQ_ch = 6144 channel bits plus, per
path, 2 x sum_{s=0}^{9} 2^s (13 - s) = 10210 bits: 26564 bits for L = 2, in
agreement with B_LL = (2L+2)NQ_ch + 2L(2N - log2 N - Q_ch - 2). The stage-0
entry is kept although nothing reads it, as that formula counts it. Partial
sums take N - 1 bits and decided bits N bits per path. The pointer memory
takes L ceil(log2 L)(log2 N - 1) bits. The sorter compares Q_max-bit metrics
extended by one live-path bit.

## Interface and timing (`lsc_decoder`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the controller |
| `ld_we`, `ld_row` | in | 1, log2(N/P) | load one row: indices ld_row*P .. ld_row*P+P-1 |
| `ld_ll` | in | P x 2 x Q_ch | channel pairs; `[j][0]` = LL(x=0), `[j][1]` = LL(x=1) |
| `ld_frozen` | in | P | 1 = frozen bit |
| `start` | in | 1 | one-cycle pulse while idle; clears all path state |
| `busy` | out | 1 | decoding in progress |
| `done` | out | 1 | one-cycle pulse at the end |
| `dec_bits` | out | N | u_1..u_N of the best path (bit k = u_{k+1}); frozen bits are 0 |
| `dec_metric` | out | Q_max | metric of the decoded path |

Load all N/P rows, then pulse `start`. `done` follows after the cycle count
given above. Loading while `busy` is not allowed; an assertion checks this. The
memories are register files with asynchronous read. Only the controller has a
reset. The state memories are cleared by `start`, and the LL memories are always
written before they are read. The information bits sit at the non-frozen
positions of `dec_bits`; taking them out is left to the surrounding system.

Parameters: `N` (power of two, at least 2P), `L` (at least 2), `P` (power of
two), `QCH`.

## What follows the published architecture and what is this design's own

Follows it:

* LL arithmetic with the min approximation, and widths that grow one bit per
  stage.
* L cores of P PEs.
* One shared channel memory.
* L LL memories, L partial-sum memories and L path memories, with crossbar copy.
* The pointer memory and its size.
* A metric register plus a radix-2L sorter with 2L(2L-1)/2 comparators.
* Control by the three counters i, s, p_s.
* The cycle count (2+R)N + (N/P) log2(N/4P).
* The defaults N = 1024, L = 2, P = 64, Q_ch = 3.

This design's own choices:

* **Memories and ports.** The memories are register files with asynchronous
  read, organised in rows of P pairs. The channel and frozen-bit memories have
  row-wide load ports.
* **Channel routing.** The channel memory reaches the cores through an extra
  input on each LL multiplexer.
* **Path selection.** The live-path mask and the tie rule are this design's.
* **Partial-sum memory.** The storage layout and the update walk are this
  design's. The published architecture reuses the partial-sum unit of an
  earlier semi-parallel SC decoder without describing it.
* **Sorting logic.** The sorter uses rank counting. The published sorter
  extends an existing radix sorter whose internals are not given.
* **Control and outputs.** The start/busy/done handshake, the reset scheme and
  the `dec_metric` output are this design's.
* **Starting stage.** The algorithm listing in the source words the starting
  stage of bit i as the "first 1 in the MSB-0 representation of i-1". The RTL
  uses the lowest set bit of i-1, which is what the stated cycle count
  requires.

Not included: the channel front end (computing and quantising
(y - mu(x))^2) and any code construction. The frozen set is an input. The
testbenches build one from Bhattacharyya parameters.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv` that compares it
with values computed independently in the testbench. The end-to-end benches
(`tb_lsc_decoder`: N = 128, L = 4, P = 8, 24 codewords from 0 to 4 dB;
`tb_lsc_decoder_full`: defaults, 6 codewords; `tb_lsc_workload_l4`: N = 1024,
L = 4) drive random codewords through an AWGN channel. They compare:

* every decoded word and metric with `lsc_ref_pkg::lsc_ref`, a behavioural list
  decoder that copies all LLs explicitly and recomputes partial sums by
  re-encoding;
* the cycle count with the schedule formula and, where it applies, the closed
  form.

They also count path duplications, discards, frozen-bit commits, selection
cycles and reads redirected by the pointer memory, and fail if any of these
never occurred. In the runs so far, all words match the model bit for bit, and
the cycle count is 2593 (2592 + done) at the default size for both L = 2 and
L = 4.

Not verified: timing closure, area, and the error-rate curves of the published
work (only a handful of frames are simulated).

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lsc_pkg.sv tb/lsc_ref_pkg.sv \
  rtl/lsc_*.sv tb/tb_lsc_env.sv tb/tb_lsc_decoder_full.sv --top-module tb_lsc_decoder_full
./obj_dir/Vtb_lsc_decoder_full
```

Replace the last testbench file and top module to run another bench. Each bench
prints `TB_RESULT checks=<n> failures=<m>`. To try other sizes, change the
localparams of `tb_lsc_decoder.sv`. Keep N >= 4P if the closed-form cycle check
should apply.
