# ORBGRAND decoder: RTL for a parallel guessing decoder of short codes

This is synthesizable SystemVerilog for a soft-input decoder that handles any
linear block code of length up to 128 and rate 0.75 or higher. It uses
*Ordered Reliability Bits GRAND* (ORBGRAND). The design follows the VLSI
architecture published for this algorithm: a sorter, three syndrome shift
registers with fixed XOR buses, and a controller that takes the partition
schedule one clock per step. It adds the choices needed to make that
architecture complete and runnable. The last section lists where this RTL goes
beyond what that description gives.

## The idea: guess the noise, not the codeword

A GRAND decoder ignores the structure of the code. It takes the hard decisions
`y_hat` of the received word and tries error patterns `e`, most likely first. It
stops at the first pattern for which `y_hat ^ e` is a codeword, i.e. the
syndrome `H·(y_hat ^ e)ᵀ` is zero. Because `H` is linear, the test is an XOR of
syndromes:

    s_c ^ s(e) == 0,   s_c = H·y_hatᵀ,   s(e) = XOR of the H columns where e = 1

ORBGRAND orders the patterns with the soft information:

* Sort the bits by reliability `|y|`, least reliable first. Rank `j` (1-based)
  is the `j`-th least reliable bit, and `Ind[j-1]` is its position in the word.
* The *logistic weight* of a pattern is the sum of the ranks of the bits it flips.
  Patterns are tried in increasing logistic weight `m`.
* The patterns of weight `m` that flip `P` bits are the ways to write `m` as a sum
  of `P` distinct positive integers `λ1 > λ2 > … > λP` (distinct integer
  partitions). A pattern flips the bits of ranks `λ1 … λP`.

Two limits keep the search bounded. `LW` is the largest logistic weight tried
(96 here). `PMAX` is the largest number of flipped bits (8 here). A word for which
nothing passes up to `LW` is returned unchanged with `found = 0`.

In the hardware, `s_j` is the H column of the rank-`j` bit ("sorted syndrome").
Testing a pattern is then one `NMK`-bit XOR of `P` sorted syndromes with `s_c`,
followed by a zero test.

## Decode timeline

A decode is a sequence of clock cycles ("time steps"). Each step tests a whole
family of patterns in parallel:

| cycles | what happens |
|---|---|
| edge 0 | `y` is registered; `y_hat` = sign bits, magnitudes go to the sorter |
| 1st cycle | `s_c` is checked; `s_c = 0` ends the decode (`y_hat` is a codeword) |
| `log2(N/S)` cycles | pipelined bitonic sort of the magnitudes (7 cycles for N = 128) |
| 1 | all `N` single-bit patterns |
| for each m = 3 … LW: 1 | all 2-bit and 3-bit patterns of weight `m` |
| for each m, each P = 4 … PMAX: 1 per tuple | one cycle per choice of the small parts `(λP, …, λ4)`; the core finds `λ3, λ2, λ1` |

The decode stops in the first step whose core reports a hit. The result leaves
one edge later as a one-cycle `out_valid` pulse.

The number of cycles for a decode that finds nothing is fixed by `LW` and `PMAX`:

| N | LW | PMAX | weight steps | total worst case |
|---|---|---|---|---|
| 128 | 96 | 8 | 93409 | **93417** cycles (default) |
| 128 | 64 | 6 | 4218 | **4226** cycles |

The total is the weight steps plus the 7 sorting cycles plus the one single-bit
step. At a 454 MHz clock, 93417 cycles are 206 µs; for a (128,105) code that is
0.51 Mbit/s worst-case information throughput. A codeword takes 1 cycle, and one
flipped bit takes `log2(N/S)+1` = 8 cycles.

## Controller: enumerating the small parts (`controller.sv`)

For `P > 3` the controller fixes the small parts `λ4 … λP`. The core then searches
all `(λ3, λ2, λ1)` that complete them. The tuples are counted like nested loops
with `λP` outermost and `λ4` innermost:

    λi runs from λ(i+1)+1 upward while  i·λi + i(i−1)/2 ≤ R_i,   R_i = m − (λ(i+1) + … + λP)

The bound says that after choosing `λi`, the `i−1` larger parts still fit, being
at least `λi+1, λi+2, …`. It is the no-division form of the bound
`λi < (2m − i(i−1) + 2 − 2Σ_{j>i}λj) / 2i`. Each step the controller works out the
next tuple like an odometer:

* It finds the lowest level `i` whose part can still grow.
* It increments that part.
* It resets every level `k` below `i` to its smallest value, `λi' + (i − k)`,
  where `λi'` is the incremented part.

If no level can grow, the controller moves to the first `P' > P` that has a tuple
at all. This needs `m ≥ P'(P'+1)/2`. Otherwise it moves to the 2/3-bit step of
`m+1`.

With the next tuple the controller presents three values:

* `s_comp = s_c ^ s_λ4 ^ … ^ s_λP`, registered together with the step.
* The residual weight `mr = m − Σ λ4…λP` left for the three largest parts.
* The smallest allowed `λ3`, `lo = λ4 + 1`. It is 1 in the 2/3-bit step.

A hit is reported with the core's `λ1 … λ3`, the controller's `λ4 … λP` and the
Hamming weight.

## Decoder core: three registers and fixed XOR buses (`decoder_core.sv`)

This block tests every pattern of one step in a single cycle. It holds three
registers of sorted syndromes. Each is loaded from `s_sorted` with a shift set by
the controller:

    SR1[j] = s_(mr − 2·lo + 1 − j)    descending, supplies λ1
    SR2[j] = s_(lo + j)               ascending,  supplies λ2
    SR3[t] = s_(lo + t)               supplies λ3

Every entry has a valid bit, which is 0 when its rank falls outside `1…N`. SR1 and
SR2 hold `2·(λ3max+1)` entries and SR3 holds `λ3max` entries, where
`λ3max = ⌊(2·LW − 6) / 6⌋`. That is 64/64/31 entries at `LW = 96`. Fixed wiring
combines the registers:

* **P = 2 bus** (2/3-bit step only). Candidate `u` tests `λ2 = 1+u`, `λ1 = m−1−u`
  as `s_comp ^ SR1[u] ^ SR2[u]`.
* **P = 3 bus `t`** (`t = 0 … λ3max−1`). Candidate `u` tests `λ3 = lo+t`,
  `λ2 = λ3+1+u` and `λ1 = mr−λ3−λ2`, as
  `s_comp ^ SR3[t] ^ SR2[t+u+1] ^ SR1[2t+u+2]`.

  The index arithmetic works because SR1 runs downward. Moving `λ2` up by one
  moves `λ1` down by one, so both indices grow with `u`, and the wiring is the
  same for every `m`.

A candidate only takes part when `λ1 > λ2`. For bus `t` this means
`2u < mr − 3·lo − 3t − 2`. In the 2/3-bit step with `lo = 1` and `s_comp = s_c`,
the buses hold every 2- and 3-part partition of `m`. In a `P > 3` step they hold
every completion of the current small parts.

Each XOR result is NOR-reduced, so a 1 means the syndrome is zero. A
two-dimensional priority encoder then picks the first hit. Rows are the P = 2 bus,
then the P = 3 buses by increasing `λ3`. Columns run by increasing `λ2`. In the
single-bit step the same cycle instead compares `s_c` with all `N` sorted
syndromes and reports the least reliable match.

The sizes for the default configuration are:

* One 47-candidate P = 2 bus.
* 31 P = 3 buses of decreasing length.
* 721 candidates on the P = 3 buses.
* With the 47 P = 2 candidates and the 128 single-bit comparisons, 896 zero tests
  per cycle.

## Sorting and the segmented sorter (`bitonic_sorter.sv`, `llr_sorter.sv`)

`bitonic_sorter` is a bitonic network of length `L` with one register stage after
each of its `log2(L)` merge phases. The key is `{|y|, original index}`, so equal
magnitudes are ordered by position and the order is deterministic. The payload is
the bit's H column. The sorter therefore delivers `Ind` (from the key) and the
sorted syndromes `s_j` (from the payload) together.

`llr_sorter` can split the word into `SEGMENTS` equal parts sorted independently.
Their outputs are interleaved: the smallest of every segment, then the second of
every segment, and so on. This shortens the sort to `log2(N/S)` cycles and makes
the network smaller. The cost is an approximate order: an element can land a few
ranks away from its true place. The decoder stays exact with respect to *that*
order, so the error-correcting performance drops slightly. `SEGMENTS = 1` (exact
sort) is the default; 2 and 4 are the options the architecture proposes.

## From ranks back to bits (`index_mux.sv`, `word_generator.sv`)

`PMAX` `N:1` multiplexers turn the winning ranks into bit positions
(`pos = Ind[λ − 1]`). `λ = 0` marks an unused multiplexer. The word generator
flips those positions in `y_hat` and registers the estimate `c_hat`. For a
systematic code the message is read directly from the information positions of
`c_hat`. The architecture's final `G⁻¹` multiplication is not built.

## Storage and syndrome (`h_memory.sv`, `syndrome_unit.sv`)

The parity-check matrix lives in an `N × NMK`-bit register array, written one
column per cycle. Bit `r` of column `i` is `H[r][i]`. A code with fewer than `NMK`
parity rows leaves the upper rows zero. A code shorter than `N` gets zero columns
for the missing positions; those bits are fed as certain zeros (sign 0, largest
magnitude). The syndrome unit XORs the columns selected by `y_hat`.
Both are combinational from the stored array.

## Interface (`orbgrand_top.sv`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `h_we`, `h_addr`, `h_wdata` | in | 1, log2 N, NMK | write one H column (only while idle; asserted) |
| `in_valid` / `in_ready` | in / out | 1 | offer a word; accepted on an edge where both are 1 |
| `y[N]` | in | Q each | LLRs, sign-magnitude: bit Q−1 = sign (1 = hard decision 1), Q−2:0 = magnitude |
| `out_valid` | out | 1 | one-cycle pulse: result valid |
| `c_hat` | out | N | estimated codeword (`y_hat` if nothing found) |
| `found` | out | 1 | a pattern passed the parity check |
| `out_hw` | out | log2(PMAX+1) | number of flipped bits |

One word is decoded at a time. `in_ready` is low from the accepting edge until
`out_valid`. The input word need not be held after it is accepted.

## Parameters

Package `orbgrand_pkg` holds the defaults and the size functions (`lam_max`,
`sr12_len`, bus lengths) shared by the core and the controller.

| parameter | default | meaning |
|---|---|---|
| `N` | 128 | code length |
| `NMK` | 32 | parity rows (n − k), i.e. rates ≥ 0.75 at n = 128 |
| `Q` | 5 | LLR bits |
| `LW` | 96 | largest logistic weight |
| `PMAX` | 8 | largest Hamming weight (≥ 3) |
| `SEGMENTS` | 1 | sorter segments (power of two) |

`N` and `N/SEGMENTS` must be powers of two. At the defaults the top synthesizes
(generic yosys cells, before technology mapping) to about 29.7 k cells. It has
43 k flip-flop bits:

* about 38 k in the 7-stage sorter pipeline, which carries 128 × (11 + 32) bits
  per stage;
* 4096 holding H.

On top of these come 5120 bits that yosys keeps as register arrays: the three
shift registers of the decoder core (64 + 64 + 31 entries of 32 bits).

## Codes that fit

A code fits the default build when:

* its length is at most 128, and
* it has at most 32 parity rows.

Shorter codes are padded as described above.

| code | n − k | notes |
|---|---|---|
| 5G NR CRC-aided polar (128,105) | 23 | checked with a random code of this shape |
| polar (128,99) | 29 | |
| BCH (127,106) | 21 | one padding position; checked |
| BCH (127,113) | 14 | one padding position |
| CRC / random linear (128,104) | 24 | checked |

Only `H` is needed; the decoder never uses the code's structure. Larger `LW` or
`PMAX` are parameter changes, but the core grows roughly with `LW²` and the worst
case with a high power of `LW`.

## Departures and own choices

These points follow the architecture as published:

* The block structure.
* The shift-register sizes and contents.
* The bus equations and the `λ1 > λ2` masking.
* The Lemma-style bounds and the nested enumeration order.
* The `s_comp` formation.
* The bitonic sorter and the segmented interleave.
* The parameter values.
* The resulting worst-case cycle counts.

These points are this design's own:

* **Register loading.** The published design moves the registers by chosen shift
  amounts between steps. Here each register is reloaded every step from the
  sorted syndromes through a variable-shift window. It behaves the same and costs
  a barrel shifter.
* **SR length at small `LW`.** At `LW = 96` the registers have exactly
  `2·(λ3max+1)` entries. For small test sizes the length is raised to what the
  buses read. At the default, a few entries at the ends of SR1/SR2 are never read
  (linters report them as unused).
* **Priority among hits in one step.** This is the order given above (P = 2
  first, then by `λ3`, then by `λ2`). Patterns of the same logistic weight are
  equally likely, so any order is valid.
* **Extra sort cycles.** The 8 cycles beyond the weight steps are taken as the 7
  sort cycles plus the single-bit step. The zero-syndrome check overlaps the first
  sort cycle. This reproduces the published worst cases exactly.
* **Defined by this design.** The handshake, the LLR sign convention, the reset
  and the H write port.
* **No `G⁻¹` stage.** `c_hat` is the output.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

* `orbgrand_ref_pkg`: a behavioural ORBGRAND reference. It sorts, runs the
  schedule with plain nested loops and searches triples exhaustively, and it
  predicts codeword, flag, weight and exact latency.
* `tb_bitonic_sorter`, `tb_llr_sorter`: random keys (many ties), S = 1 and
  segmented orders.
* `tb_decoder_core`: random windows compared with an exhaustive search over all
  1/2/3-part completions.
* `tb_controller`: the full step sequence, `mr`, `lo` and `s_comp` against nested
  loops, the total cycle count, the zero-syndrome exit and hits at random steps.
* `tb_h_memory`, `tb_syndrome_unit`, `tb_index_mux`, `tb_word_generator`.
* `tb_orbgrand_top`: N = 32, LW = 24, PMAX = 6, with an unsegmented, a
  2-segment and a 4-segment decoder on random codes. It counts every mechanism: zero syndrome, each
  Hamming weight 1…6, abandonment, H reload and a segmented-order difference.
* `tb_sorter_displacement`: `llr_sorter` at N = 128 with 2, 4, 8 and 16
  segments on random words. It measures how far each bit lands from its true rank
  and checks the shares against the published figures for the segmented sorter,
  within 1.5 points. For example, with 4 segments 81.5 % of the bits land within
  10 positions (81.6 % published).
* `tb_orbgrand_full`: the top at its defaults. It checks words with 0–8 errors and
  one undecodable word that must take 93417 cycles.
* `tb_orbgrand_workloads`: default and LW = 64/P = 6 decoders side by side on
  (128,105), (128,104) and padded (127,106) random systematic codes. It checks
  the 93417- and 4226-cycle worst cases.

To run one (Verilator 5):

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_orbgrand_full \
        rtl/orbgrand_pkg.sv tb/orbgrand_ref_pkg.sv tb/tb_orbgrand_full.sv
    ./obj_dir/Vtb_orbgrand_full

Add `-Wno-fatal` if your Verilator version turns width lint into errors. The
full-size build takes about half a minute, and the simulation about a second.
