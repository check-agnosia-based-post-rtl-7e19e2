# Check-agnosia post-processing for a flooded min-sum qLDPC decoder

Quantum LDPC codes are decoded from a syndrome: the decoder sees which parity
checks are violated and has to guess which qubits went wrong. Message-passing
(MP) decoders do well on classical LDPC codes. On quantum codes they often fail
to settle, because the code is degenerate. Small structures in the Tanner graph
("quantum trapping sets") make the a posteriori values of a few qubits keep
flipping from one iteration to the next.

*Check-agnosia* is a cheap fix applied after MP fails. The decoder looks for
the checks whose incoming messages are least reliable. For a few of them, it
decodes again from scratch while pretending to know nothing about the qubits
that check touches: their prior reliability is set to zero. One of these
re-decodings (MP\*) usually escapes the trapping set and meets the syndrome.
Nothing is solved algebraically. Each MP\* decoder is the same circuit as the
first decoder with a multiplexer in front of each prior. The whole method is
therefore a few hundred comparators, one adder per check, and either a
controller or more copies of the decoder.

This RTL implements the method for one error type (X or Z) of a CSS code.
It uses a fully parallel *flooded* normalized min-sum decoder. Both hardware
organisations are included:

* **dedicated**: LAMBDA MP\* decoders run in parallel. This is the default.
* **hardware reuse**: a single decoder runs the MP\* rounds one after another.

Default sizes: a (3,6)-regular code with 441 checks and 882 qubits,
LAMBDA = 10 post-processing candidates, at most 30 iterations, and check
reliabilities taken at iteration 3. At 100 MHz, the dedicated design answers
in 1.13 µs or less.

## The algorithm as built

For a syndrome `s` and a prior LLR `γ` (the same for every qubit; 12 in the
reference setting):

1. **MP.** Run the flooded decoder for up to `I_MAX` iterations. Stop as soon
   as the hard decisions `ê` satisfy `H·ê = s`. Success ends everything.
2. **Check reliability.** In iteration `I_DELTA`, add the two smallest
   incoming magnitudes of each check c: `δ_c = min1 + min2`. A small δ_c
   means at least two of the check's neighbours are unsure. The check-node
   units already compute min1 and min2 to form their messages, so this takes
   only one adder per check.
3. **Sorting.** Find the LAMBDA checks with the smallest δ_c, in increasing
   order: `c_0, c_1, …`.
4. **MP\*.** For each k, decode again from the original syndrome, with
   `γ'_q = 0` for the six qubits q of check `c_k` and `γ'_q = γ` for all
   others. The stop rule is still the full syndrome.
5. **Output.** Return the first estimate that meets the syndrome. If none
   does, report failure.

The estimate of an MP\* decoder always satisfies the whole syndrome. Nothing
is fixed after the decoder, and no linear system is solved.

## Number formats

| quantity | width | range | note |
|---|---|---|---|
| message, both directions | 6 bits, two's complement | −31 … +31 | symmetric saturation |
| a posteriori LLR | 8 bits | −127 … +127 | symmetric saturation |
| qubit sum (internal) | 9 bits | | exact for 6 + 3 × 6-bit terms |
| check reliability δ_c | 6 bits, unsigned | 0 … 62 | min1 + min2, unscaled |
| prior `llr_i` | 6 bits | | 12 in the reference setting |

With 6-bit inputs the qubit sum stays within ±124 (31 + 3 × 31), so the
8-bit a posteriori value never actually saturates. Computing the extrinsic
messages from it or from the internal sum therefore gives the same result.
A positive LLR means "no error". The hard decision is 1 (error) when the
full-precision sum is negative; zero counts as no error.

## The flooded normalized min-sum decoder (`nms_flooded_decoder`)

The whole Tanner graph is laid out in hardware:

* 441 `check_node_unit`s;
* 882 `qubit_node_unit`s;
* two 6-bit registers per edge, one for each direction, over 2646 edges.

Each iteration takes two clock cycles, plus one cycle to load the data:

| cycle | name | what is registered |
|---|---|---|
| 0 | load (`start_i`) | syndrome, prior, erasure mask; every qubit-to-check message ← `γ'_q` |
| 1, 3, 5 … | CN | all check-to-qubit messages |
| 2, 4, 6 … | QN | all qubit-to-check messages, the hard decisions, and whether they meet the syndrome |

A decoding of `i` iterations therefore ends in cycle `1 + 2i`, and `fin_o` is
visible from then on. The syndrome test is computed combinationally from the
hard decisions of the QN cycle: each check XORs its six decisions with its
syndrome bit, and the results are NOR-reduced. So no extra cycle is spent
testing.

**Check-node unit.** It does a linear scan for the smallest incoming
magnitude, min1, its position, and the second smallest, min2. The output to
edge j is:

* magnitude: min2 if j holds min1, otherwise min1;
* scaling: the magnitude is then multiplied by `1 − 2^-NMS_K`, computed as
  `m − (m >> NMS_K)` with truncation. `NMS_K = 3` gives the factor 0.875;
* sign: the XOR of the syndrome bit and all input signs, XORed once more with
  edge j's own sign.

The same unit drives `delta_o = min1 + min2`, unscaled.

**Qubit-node unit.** It computes `sum = γ'_q + Σ c2q`. The output to edge k is
`sat6(sum − c2q_k)`. The unit also produces `sat8(sum)` and the hard decision.
The 8-bit a posteriori value is not used further by this design. It is kept
so that the unit matches the usual 6/8-bit decoder.

**Erasure.** `erase_i[q] = 1` replaces `γ_q` by 0 both at load time and in
every qubit sum. An MP\* decoder is therefore the plain decoder with a
different mask.

`delta_stb_o` is high in the QN cycle of iteration `I_DELTA`, the cycle in
which the δ values of that iteration are on `delta_o`. The sorting unit
registers them there, so the decoder keeps no copy.

## The parity-check matrix

The reference code is a [[882,24]] code whose H has these properties:

* 441 × 882;
* column weight 3 and row weight 6;
* no 4-cycles.

Its entries are not available. The RTL therefore uses a quasi-cyclic matrix
with the same properties, defined by functions in `ca_pkg`:

* The base matrix is 7 × 14. Base column `b` (0 … 13) has non-zero blocks in
  base rows `b`, `b+1` and `b+3`, all mod 7. Every base row then has exactly
  six non-zero blocks.
* The block at base position (r, b) is the Z × Z identity matrix, cyclically
  shifted by `(r·b) mod Z`. The default Z = 63 gives 441 × 882.
* A direct search for pairs of checks that share two qubits found none for
  Z = 63, nor for Z = 9, the size used by the reduced testbenches. Both
  graphs are therefore free of 4-cycles.
* Edge `e = c·6 + j` is the j-th edge of check c. `check_qubit(c, j, Z)`,
  `qubit_check(q, k, Z)` and `qubit_edge(q, k, Z)` give the wiring. Every
  decoder instance is elaborated from them.

The `Z` parameter scales the whole design: N = 14Z qubits and M = 7Z checks.
To decode another (3,6)-regular code, replace these functions with a
description of its graph. The decoders, the sorter and the controllers stay
as they are. Other degrees need changes to `DV`/`DC` and to the function
bodies.

Error-rate results depend on the real code. This matrix reproduces the
sizes, the latency and the cost of the reference design, not its error-rate
curves.

## Sorting unit (`cr_sorter`)

The sorting unit is the part with the least obvious timing. It has to
deliver the LAMBDA smallest of M = 441 six-bit values in
`ceil(LAMBDA/2) · ceil(log2 M)` cycles, which is 5 × 9 = 45 cycles.

* **Capture.** `capture_i` copies all M values of δ into the unit's own
  registers and clears a "taken" bit per check.
* **Tree.** The M leaves are padded to 2^D, with D = 9, giving 512 leaves.
  They form a binary heap. Each node holds the two smallest candidates of
  its subtree as `{empty, δ, index}`. A node merges its two children with
  three comparisons: compare the two first candidates, then compare the
  winner's second against the loser's first. Taken and padding leaves are
  "empty" and lose every comparison.
* **Pipeline.** Every internal level of the tree except the root is
  registered (D − 1 levels), and the root is combinational. A change at the
  leaves therefore reaches the root output after D − 1 clock edges. In the D-th cycle of a pass, the root's two
  candidates are written to `list_o[2p]` and `list_o[2p+1]` and marked
  taken.
* **Passes.** `ceil(LAMBDA/2)` passes are run back to back. A pass cannot
  overlap the previous one, because it needs the previous pass's "taken"
  bits.
* **Ties.** Equal δ values come out in increasing check index. The left
  subtree, which holds the lower indices, wins ties.

`done_o` rises S = 45 cycles after the capture cycle and stays high until the
next capture.

**Comparator count.** A single-minimum tree has M − 1 comparators. This tree
keeps two minima per node and has about three per node. The extra
comparators are what deliver two checks per pass, which the cycle count
above requires.

## Dedicated architecture (`ca_dedicated`, default)

The blocks are:

* the MP decoder `u_mp`;
* the sorter `u_sort`;
* LAMBDA copies of `{erasure_select, nms_flooded_decoder}` in `g_pp[k]`.

`erasure_select` turns the check index `c_k` into the 882-bit mask of its
support. Each qubit compares `c_k` with its three neighbouring check indices,
which are constants.

The control flow, with `start_i` in cycle 0:

| event | cycle |
|---|---|
| MP loads | 0 |
| sorter captures δ (QN of iteration `I_DELTA`) | `2·I_DELTA` |
| sorted list complete | `1 + 2·I_DELTA + S` |
| all MP\* load together | `1 + 2·I_DELTA + S` (cycle 52 by default) |
| MP\* k ends after j iterations | `2 + 2·I_DELTA + S + 2j` |
| worst case: MP\* uses `I_MAX` iterations | `(1+2·I_DELTA) + S + (1+2·I_MAX)` = 7 + 45 + 61 = **113** |

The MP\* decoders start before MP has finished. With `I_DELTA = 3`, the
post-processing starts at cycle 52 while MP can run to cycle 61.

The result is chosen as follows:

* **MP has priority.** If MP meets the syndrome, `done_o` pulses in that
  cycle with MP's estimate. Any MP\* already running is abandoned.
* An MP\* that succeeds while MP is still running is **held**: its result
  waits until MP reports failure.
* Once MP has failed, the **first MP\* to succeed** wins. If several have
  succeeded by the time MP fails, or finish in the same cycle, the lowest k
  wins, which is the least reliable check.
* If every MP\* fails, `done_o` pulses when the last one finishes.
  `success_o = 0` and `ehat_o` holds MP's estimate.

The latency therefore runs from `1 + 2i` (MP alone) up to 113 cycles. It is
167 cycles with `I_DELTA = I_MAX = 30`, the setting in which the reliabilities
come from MP's final iteration.

The MP\* decoders read the syndrome and prior from a copy registered by this
block at `start_i`.

## Hardware-reuse architecture (`ca_hw_reuse`, `HW_REUSE = 1`)

A single `nms_flooded_decoder`, a single `erasure_select` and the sorter do
all the work. The syndrome and prior are kept in registers. After MP fails,
the decoder is reloaded for round k = 0, 1, … with the support of `c_k`
erased. Each round is loaded in the same cycle the previous round reports
failure, so no cycle is lost between rounds. The first successful round ends
the decoding. If all LAMBDA rounds fail, the estimate of the last round is
returned with `success_o = 0`.

The first round starts at `max(1 + 2·I_MAX_used, 1 + 2·I_DELTA + S)`. If MP
fails before the list is ready, the controller waits in `S_WSORT`. With
`I_DELTA = I_MAX = 30`, the default of `ca_hw_reuse` itself, the worst case is
`61 + 45 + 10·61 = 716` cycles, 7.16 µs at 100 MHz. The wrapper
`check_agnosia_top` passes its own `I_DELTA`, which defaults to 3. Set
`I_DELTA = 30` together with `HW_REUSE = 1` to get the 716-cycle design.

This is a sequential architecture, so its latency grows with the number of
rounds run. For the same size, it has roughly 1/(LAMBDA + 1) of the decoder
area of the dedicated design.

## Top level (`check_agnosia_top`)

| parameter | default | meaning |
|---|---|---|
| `HW_REUSE` | 0 | 0 = dedicated MP\* decoders, 1 = one decoder reused |
| `Z` | 63 | circulant size; M = 7Z checks, N = 14Z qubits |
| `LAMBDA` | 10 | number of unreliable checks tried |
| `I_MAX` | 30 | maximum iterations of MP and of every MP\* |
| `I_DELTA` | 3 | iteration at which δ_c is taken (1 … I_MAX) |
| `NMS_K` | 3 | normalization factor 1 − 2^-NMS_K |

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start_i` | in | 1 | one-cycle pulse: sample `syn_i`, `llr_i`, start. It also restarts a decoding in progress. |
| `syn_i` | in | M | syndrome |
| `llr_i` | in | 6 | prior LLR for every qubit, e.g. 12 |
| `busy_o` | out | 1 | from the cycle after `start_i` until `done_o` |
| `done_o` | out | 1 | one-cycle pulse; the outputs below are valid in that cycle |
| `success_o` | out | 1 | `ehat_o` satisfies the syndrome |
| `ehat_o` | out | N | error estimate, 1 = flipped qubit |
| `pp_used_o` | out | 1 | the estimate comes from an MP\* decoder or round |
| `pp_index_o` | out | 4 | which one: index into the sorted list |
| `pp_list_o` | out | 10 × 9 | the sorted unreliable checks, valid once sorting is done |

`ehat_o` is a register output of the decoder that produced it. It stays
stable after `done_o` until the next `start_i`.

## Cost and speed at the default size

| quantity | value |
|---|---|
| message registers | 2 × 2646 × 6 bits per decoder; the dedicated design has 11 decoders |
| check-node units | 441 per decoder |
| qubit-node units | 882 per decoder |
| sorter | 441 × 6-bit δ registers plus a tree of about 500 registered nodes |
| worst case, dedicated, `I_DELTA` = 3 | 113 cycles |
| worst case, dedicated, `I_DELTA` = 30 | 167 cycles |
| worst case, hardware reuse | 716 cycles |

Each registered tree node is 2 × 16 bits. The critical path is one CN or one
QN phase: a six-input two-minimum search with sign logic, or a four-input
adder with saturation.

## Simulation

All testbenches are self-checking. Each prints
`TB_RESULT checks=… failures=…` and stops itself if a watchdog expires. They
compare against `tb/ca_ref_pkg.sv`, a behavioural model written
independently of the RTL. It shares only the graph functions of `ca_pkg`.
The model:

* computes each check message by an explicit minimum over the other five
  edges;
* finds qubit neighbours by scanning all edges;
* sorts by selection sort;
* runs Algorithm 2, with both cycle models, as sequential code.

| testbench | what it runs |
|---|---|
| `tb_check_node_unit`, `tb_qubit_node_unit` | random and corner-case messages against the direct formulas |
| `tb_erasure_select` | every check index at Z = 63 against the supports computed from H |
| `tb_cr_sorter` | 441/10 and 20/5 configurations, ties, exact 45- and 15-cycle latency, abort |
| `tb_nms_flooded_decoder` | Z = 9, random errors and erasures; bit-exact estimates, iteration counts and δ values; `1 + 2i` cycles |
| `tb_ca_dedicated`, `tb_ca_hw_reuse` | Z = 9, whole decoding against the model, including the exact cycle of `done_o` |
| `tb_check_agnosia_top` | both architectures through the top. Each mechanism must occur at least once: MP success before and after the MP\* start, MP\* win, held MP\* result, several MP\* successes, all-fail, waiting for the sorter, first-round and later-round success. |
| `tb_check_agnosia_full` | the top with no parameter overrides (441 × 882, LAMBDA = 10). Random errors of weight 10 … 120. It must observe the 113-cycle worst case. |

To build and run with plain Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -j 0 -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_check_agnosia_top \
    rtl/ca_pkg.sv tb/ca_ref_pkg.sv tb/tb_check_agnosia_top.sv
./obj_dir/Vtb_check_agnosia_top
```

Replace the top-module name and testbench file for any other test.
`-Wno-fatal` keeps Verilator's lint warnings (unused signals, width notes
in the testbenches) from stopping the build. The
reduced tests build in well under a minute. The full-size test needs about
5 minutes and 2.6 GB to build and runs in seconds.

Two points matter when writing new tests for this code. First, sample
outputs a little after the clock edge; the testbenches wait `#1`. Second,
declare loop variables inside `initial` blocks without an initialiser and
assign them separately, because an initialiser on such a variable runs only
once.

## Where this RTL departs from, or adds to, the reference design

* **Parity-check matrix.** The matrix is assumed, as described above. Only
  its shape and girth match the reference code.
* **Flooded schedule only.** The reference design also has a layered variant:
  seven overlapping layers, a random layer order stored in ROM, and 15
  iterations. That variant needs a layer partition of the real matrix and is
  not part of this RTL.
* **Order inside an iteration.** The reference description lists the qubit
  phase (messages and a posteriori LLRs) before the check phase. Here the
  check phase comes first, and the load cycle sets every qubit message to the
  prior, which is what a first qubit phase would produce. The messages are the
  same. The cycle counts (1 load +
  2 per iteration) are the reference design's. The phase order is a choice
  of this RTL.
* **Arithmetic details.** The following are this RTL's choices:
  * truncation in the normalization;
  * symmetric saturation;
  * zero LLR counted as "no error";
  * min1 given to the lowest edge position on ties.
* **No syndrome masking in hardware reuse.** Some descriptions of the
  reuse architecture include one multiplexer per check to restrict the
  syndrome to the part around `c_k`. That belongs to the variant that solves
  for the erased qubits separately. Here every MP\* round decodes the full
  syndrome, so only the 882 prior multiplexers exist.
* **Sorter.** The tree keeps two minima per node, as explained under the
  sorting unit. The latency is the reference formula, exactly.
* **Result selection and failure output.** When several MP\* decoders
  succeed, the parallel design picks the lowest k among those that have
  succeeded by the deciding cycle. The estimate returned on failure is also
  this RTL's choice. Both are described above.
* **Handshake.** The following are this RTL's own:
  * `start_i` / `done_o`;
  * restart by a new `start_i`;
  * asynchronous reset of the control state only; message registers are
    written at load time and have no reset.
* **Lint notes.** Verilator reports some unused signals, each left on
  purpose:
  * the 8-bit a posteriori LLRs;
  * the δ and iteration outputs of the MP\* decoders;
  * the sorter's δ list.

  It also reports that the reset is used in assertion `disable iff` clauses.
  The affected modules' header comments say so.
