# Low-latency list decoding of polar codes with double thresholding

A successive-cancellation list (SCL) decoder keeps up to L candidate
paths. At each information bit every path splits in two, so 2L
candidates have to be cut back to L. The usual way is to sort the 2L
path metrics. With a large list (L = 16) that sort is slow, and the
whole list has to wait for it at every information bit.

This design replaces the sort with two comparisons per candidate against
thresholds that are already known. The thresholds come from the previous
metrics:

* the **acceptance threshold** AT = pm_{L/2}, the metric of rank L/2
  (0-based) of the L current paths;
* the **rejection threshold** RT = pm_{L-2}, the second largest current
  metric (the largest, pm_{L-1}, can be chosen by a parameter).

A candidate below AT is always kept. A candidate above RT is always
dropped. Candidates in between fill the remaining places of the list in a
fixed priority order. All 4L comparisons run in parallel. So the metric
update and the pruning fit in a single clock cycle. The two thresholds are
computed off the critical path while the decoder moves on to the next
leaf.

The RTL is parameterised. Its defaults are the configuration the
architecture was synthesised in: code length N = 1024, list size L = 16,
M = 64 processing elements per SC datapath, 6-bit LLRs and 8-bit path
metrics.

## 1. Why double thresholding is safe, and where it loses

Take the L current metrics sorted, pm_0 <= ... <= pm_{L-1}. Each path
extends to two candidates. One candidate keeps pm_l. The other gets
pm_l + |LLR|. So a candidate below pm_l can only come from one of the l
paths that are better than path l. That gives between l and 2l candidates
below pm_l. Two consequences follow:

* **DTS.1** (keep if pm < AT = pm_{L/2}) keeps at most L candidates, and
  these are among the best. The list can never overflow on DTS.1 alone.
  The top level asserts this.
* **DTS.2** (drop if pm > RT): at least L-1 candidates lie at or below
  pm_{L-1}, so with RT = pm_{L-1} at most L+1 candidates are dropped, and
  all of them are truly outside the best L.
* **DTS.3** (AT <= pm <= RT): this band fills the list. It is the only
  place where the result can differ from an exact sort, because the band
  is filled in index order, not by metric.

A tighter RT (pm_{L-2}) makes the band smaller, so fewer wrong choices
are possible. The price is that DTS.2 can now drop more than L
candidates. When that happens the list is left with fewer than L paths
for one step. The published error-rate curves put the optimum at
RT = pm_14 for L = 16, with a loss below 0.02 dB against a full sort.
That is the default here (`RT_SECOND_MAX = 1`).

Empty list slots, while the list is still growing from one path, carry a
valid bit. The threshold tracker sees them as +infinity. With fewer than
L/2+1 paths, AT is therefore infinite and every extension is kept, which
is the ordinary list-growing behaviour.

## 2. Threshold tracking (`tta`)

RT is simple: sort each half of the metrics, then compare the tops of the
two halves. For the second maximum, first compare the two maxima. The
loser stays in the race against the runner-up of the winning half.

AT needs the median. The circuit finds it without a full sort:

1. Two radix-L/2 sorters sort the metrics in halves A and B.
2. The median property of two sorted lists of length h says this. If
   A[h/2] > B[h/2], the element of rank h of A∪B lies in the lower half
   of A or in the upper half of B. Otherwise it lies in the upper half of
   A or the lower half of B. Both kept halves are still sorted, and the
   rank to look for is again the middle one.
3. So one comparator and h multiplexers halve the set. After log2(L)
   stages one value is left. The last stage takes the larger of two.

For L = 16 this is two 8-input sorters, 15 multiplexers and 4
comparators. The design registers the sorter outputs and the final AT/RT,
so the tracker has two cycles. That is always enough: after a metric
change, the next pruning is at least three cycles later (see §4).

The sorter is an odd-even transposition network. Any sorter would do.

## 3. Datapath and memories

```
 channel LLRs ──► llr_memory ──► crossbar ──► scd_array (L x M PEs) ──► pmu ──► tta
                      ▲             ▲              ▲                      │ ▲      │
                      │      pointer_memory  partial_sum_memory           ▼ │      ▼
                      │             ▲              ▲                      dts ◄── AT/RT
                      └─────────────┴── lazy_copy ◄┴──────────────────────┘
                                            │
                                       path_memory ──► crc_check ──► u_hat
```

* **SC datapaths** (`scd_array`, `pe`): L identical decoders run in lock
  step. Each has M processing elements. Each element computes the
  min-sum `f(a,b) = sign(a)sign(b)min(|a|,|b|)` or
  `g(a,b,β) = b + (1-2β)a` on one LLR pair.
* **LLR memory** (`llr_memory`): the N channel LLRs, shared by all paths,
  plus one bank per path for the internal LLRs of depths 1..n-1. Depth d
  holds 2^(n-d) words starting at word N - 2^(n-d+1).
* **Lazy copy through pointers** (`pointer_memory`, `crossbar`): after
  pruning, a new path does not copy its parent's LLRs. It copies the
  parent's pointers, one per depth, that name the bank holding each
  depth. Whenever the datapaths write a depth, every path writes its own
  bank and its pointer for that depth goes back to itself. This is safe
  because all paths write the same depth at the same time, and nobody
  reads a depth while it is being written.
* **Partial sums** (`partial_sum_memory`): for each path and depth, the
  re-encoded bits of the left sibling, which the g nodes need. When leaf
  i is decided, the new bit climbs the tree through t levels, where t is
  the number of trailing ones of i. At each level it combines with the
  stored left half as `[left ^ right, right]`. The result is stored at
  depth n-t. Partial sums are copied physically from the parent on a
  lazy copy (N-1 bits per path).
* **Metric unit** (`pmu`): it forms the 2L candidates of the
  LLR-domain metric update. The candidate that agrees with the hard
  decision keeps pm. The other one adds |LLR|. Frozen leaves allow only
  u = 0. The unit holds the metric register, and metrics saturate.
* **Pruning** (`dts`) and **slot packing** (`lazy_copy`): the keep flags
  are packed in candidate order (2·path + bit) into slots 0..L-1. Slot s
  records its parent path and its new bit. These drive the copy in the
  following cycle.
* **Path memory** and **CRC selection** (`path_memory`, `crc_check`):
  each slot copies its parent's row of decided bits and writes the new
  bit. After the last leaf, all L rows are CRC-checked in parallel. The
  output is the passing path with the smallest metric. If no path
  passes, the output is the valid path with the smallest metric.

## 4. Schedule and latency (`controller`)

The controller walks the scheduling tree depth first. A node at depth d
has 2^(n-d) outputs and takes max(1, 2^(n-d)/M) cycles. After every leaf
node come two extra cycles: **DTS** (metric update and pruning in one
cycle) and **LCP** (the lazy copy). For N = 4 the sequence is:

| cycle | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| datapath | f¹ | f² | DTS | LCP | g² | DTS | LCP | g¹ | f² | DTS | LCP | g² |
| tracker | | | | TTA | TTA | | TTA | TTA | | | TTA | TTA |

That gives

    T = 4N + (n - 2 - log2 M) * N / M        cycles per codeword.

**Frozen siblings.** When bits 2j and 2j+1 are both frozen, both
decisions are known (0, 0). The whole leaf pair, f, DTS, LCP, g, DTS and
LCP (6 cycles), collapses into one metric update from the two parent
LLRs a, b of depth n-1:

    pm += [a<0]|a| + [b<0]|b|

With min-sum f this is exactly the same as running both leaves. It saves
5 cycles per frozen sibling:

    T = 4N + (n - 2 - log2 M) * N / M - 5 * FS

For the (1024, 1/2) code of the original implementation, FS = 231 gives
2973 cycles. At the reported 641 MHz that is 220 Mbps, counted as 1024
code bits per frame. The code built by the testbench (§7) has FS = 235
and decodes in 2953 cycles. The testbenches check this formula cycle by
cycle.

Frozen leaves that are not part of a frozen sibling still take their DTS
and LCP cycles, as the formula counts. In the DTS cycle the thresholds
are bypassed, because the list does not double.

## 5. Number formats

| quantity | format |
|---|---|
| channel and internal LLRs | 6-bit two's complement, kept in ±31 |
| path metric | 8-bit unsigned, saturating at 255 |
| AT / RT | 9 bits; bit 8 set means +infinity (empty slot) |
| CRC | 16 bits, x^16+x^12+x^5+1, zero initial value, MSB first |

## 6. Interface and timing (`polar_list_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset of the controller |
| ch_we, ch_addr, ch_data | in | 1, log2 N, 6 | write one channel LLR per cycle |
| frozen | in | N | bit i = 1: u_i is frozen to 0; hold it stable while decoding |
| start | in | 1 | pulse while busy is low; initialises the list and starts |
| busy | out | 1 | decoding in progress |
| done | out | 1 | one-cycle pulse; u_hat and crc_ok are valid from then on |
| u_hat | out | N | all N decided source bits of the selected path |
| crc_ok | out | 1 | the selected path passed the CRC |

`done` rises T + 1 cycles after the cycle that sampled `start`. Decoding
takes T cycles (§4) and the CRC selection adds one. The information bits
are the positions of u_hat whose frozen bit is 0. The last 16 of them
are the CRC.

## 7. What this RTL adds to, or changes from, the published architecture

The architecture publication gives the pruning rules, the threshold
tracker, the block diagram, the schedule, the latency formulas, and the
bit widths of channel LLRs and path metrics. Everything below is this
design's own choice:

* **DTS.3 ordering.** The rules say band candidates are chosen
  "randomly". The hardware description says a priority encoder is used.
  This RTL uses a priority encoder: the lowest candidate index first.
* **Median network wiring.** The printed figure labels the comparator
  inputs (element h/2 of each half). Which halves are kept for a > b is
  derived here from the median property.
* **Sorter.** Odd-even transposition.
* **Tracker pipeline.** Two register stages.
* **Memories.** LLR memory, pointer memory, partial sums and path memory
  are register arrays, not SRAM macros. Partial sums and path bits are
  copied physically in one cycle.
* **Internal LLRs.** They use the channel width (6 bits) with symmetric
  saturation.
* **Metrics.** Path metrics saturate instead of being normalised. With 8
  bits, long noisy frames drive the worse paths to 255. Ties there push
  more of the pruning into the DTS.3 band.
* **Valid bits.** Each list slot has a valid bit, so the list can grow
  from one path and can be short for a step after an aggressive RT.
* **CRC.** The polynomial and the fallback when no path passes are
  choices of this design, as is the fact that the whole code-length word
  is returned.
* **Interface.** The channel-LLR load port, the start/busy/done
  handshake and the reset are this design's own.
* **RT choice.** Only the maximum and the second maximum are available
  as RT. A third-maximum RT (pm_13) was evaluated in simulation but has
  no published circuit, so it is not built.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each compares the
block with values computed independently in the testbench:

* integer f/g for the processing elements;
* a per-depth model for the packed LLR memory;
* explicit sorts for AT/RT;
* re-encoding of decided bits for the partial sums;
* a generated depth-first schedule for the controller;
* a bit-serial CRC for the CRC selection.

The end-to-end testbenches (`tb_polar_list_decoder` at N = 128, L = 8,
M = 8, and `tb_polar_list_decoder_full` at the defaults) work as follows.
They build a rate-1/2 code with the Bhattacharyya recursion on a
BEC(0.5). Each frame gets a random message with its CRC, is encoded,
passes through a noisy BPSK channel and is quantised. Each frame is
decoded by the RTL and by a behavioural reference list decoder in the
testbench. The reference copies whole paths, finds thresholds by
sorting, and re-encodes partial sums from the decided bits. The decoded
word and crc_ok must match bit for bit, the latency must match the
formula, and a noiseless frame must decode to the transmitted word. They
also count, and require at least once:

* DTS.1 acceptance, DTS.2 rejection and DTS.3 band filling;
* a list left short of L;
* frozen leaves and frozen siblings;
* multi-cycle nodes;
* lazy copies from another path.

The full-size run (24 frames) takes about 75 s to build and 7 s to
simulate.

Not verified: timing and area, and error-rate curves over many frames.

## 9. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Itb -Irtl rtl/polar_pkg.sv \
    $(ls rtl/*.sv | grep -v polar_pkg) tb/tb_polar_list_decoder.sv \
    --top-module tb_polar_list_decoder -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. Every test ends with a
line `TB_RESULT checks=<n> failures=<n>`. To decode other codes, drive
`frozen` with your own frozen set. Change N, L or M through the
parameters of `polar_list_decoder`. N and L must be powers of two, with
L >= 4 for the second-maximum RT and M < N/2.
