# List-GRAND decoder in SystemVerilog

Guessing Random Additive Noise Decoding (GRAND) decodes any linear block code
by guessing the noise rather than the codeword. It flips bits of the received
hard decision `yhat` according to a test error pattern (TEP) `e` and asks
whether `yhat ^ e` satisfies every parity check (`H * (yhat ^ e)^T = 0`). The
first TEP that passes is taken as the channel noise. The order in which TEPs
are tried decides how good the decoder is:

* **ORBGRAND** (ordered reliability bits GRAND) ranks the received bits from
  least to most reliable (by `|y_i|`) and tries TEPs in increasing *logistic
  weight* (LW). The LW is the sum of the ranks of the flipped bits, so a TEP is
  an integer partition of its LW into distinct parts. This order does not
  depend on the channel values themselves, only on their ranking, so many TEPs
  can be generated and tested in parallel. It is not the maximum-likelihood
  (ML) order, however, and ORBGRAND loses some error-rate performance.
* **List-GRAND (LGRAND)**, implemented here, keeps the ORBGRAND schedule but
  does not stop at the first codeword. Suppose the first codeword is found at
  logistic weight `i` with a TEP of Hamming weight `h`. The search then goes
  on up to logistic weight `Lambda = min(i + delta, LW_max)`, and only with
  TEPs of Hamming weight `<= h`. Each further codeword joins a list. The output
  is the list member with the largest likelihood metric
  `M = sum_i (-1)^{c_i} y_i`. The single parameter `delta` trades extra
  queries for decoding performance that approaches ML decoding.

The hardware needs no list memory. Each candidate's metric is computed as soon
as the candidate is found and compared with the best one so far, and only the
better codeword is kept.

The default configuration is n = 128 (codes of length 127 are padded, see
below), up to n-k = 32 parity checks (rate >= 0.75), 5-bit channel values,
LW <= 96, HW <= 8 and delta <= 30.

## Block structure

```
             h_rows_in (NK x N)
                  |
              h_memory ----- columns s_i = H*1_i -----+
                  |                                     |
 y (N x Q) --+--> syndrome_unit --> s_c               bitonic_sorter (|y_i| ascending;
             |                        |                carries i and s_i)
             |                        v                  |  Ind, s in sorted order
             |                   controller <------------+  (registered once per frame)
             |           (LW / prefix schedule,          |
             |            Lambda/Delta, s_comp)          v
             |                        |  s_comp, r, lo   decoding_core (XOR network,
             |                        +----------------> NOR reduce, priority encoder)
             |                        |<---- hit, parts --+
             |                   flip positions (sorted ranks)
             |                        v
             |                   index_mux (P x n:1 via Ind) --> word_generator
             |                                                  c_hat = yhat ^ e
             |                                                       |
             |                                                 candidate register
             |                                                       |
             +--------------------------------------------------> mlcu --> M
                                                                     |
                       best-codeword register  <-- keep if M > M_best
```

`orbgrand_decoder` contains everything except the MLCU. `lgrand_top`
connects it to the `mlcu`.

| Module | Role |
|---|---|
| `lgrand_pkg` | phase enum; sign-magnitude comparison `sm_gt` |
| `h_memory` | parity check matrix, loaded whole in one cycle, read as columns |
| `syndrome_unit` | `s_c = H * yhat^T` as the XOR of the columns where `yhat` is 1 |
| `bitonic_sorter` | combinational bitonic network of 28 stages for n = 128 |
| `priority_encoder` | first satisfied lane |
| `decoding_core` | tests one group of TEPs per cycle |
| `controller` | TEP schedule, LGRAND limits, frame sequencing |
| `index_mux` | sorted ranks to channel positions |
| `word_generator` | flips the selected bits of `yhat` |
| `smto2c`, `twoc_to_sm`, `mlcu` | likelihood metric |
| `orbgrand_decoder`, `lgrand_top` | integration |

## How the TEPs are scheduled and tested

This part takes the most explaining. It is also the part where this RTL makes
its own choices, because the ORBGRAND hardware it builds on only describes the
principle.

**One-bit syndromes and linearity.** The column `s_i` of `H` is the syndrome of
flipping bit `i` alone. By linearity,
`H * (yhat ^ e)^T = s_c ^ XOR_{i in e} s_i`. So testing a TEP costs only an
XOR of a few stored columns with `s_c`, a NOR over the `n-k` bits (1 means
all checks pass) and a priority encoder over many such tests. After sorting,
the columns are held in reliability order, so a part value `p` (rank `p`,
1-based) selects column `s_sorted[p-1]`.

**Groups.** A TEP of Hamming weight `k+2` has parts `p1 < ... < pk < a < b`.
All TEPs that share the same *prefix* `p1..pk` and the same LW `m` differ only
in the split of the remainder `r = m - sum(p)` into `a < b`. That means
`a = lo+1, lo+2, ...` with `b = r - a`, where `lo = pk`. One group is tested in
one cycle:

* lane 0: the single-bit TEP `{m}` (only in the group with an empty prefix);
* lane j (1..W): the pair `{prefix, lo+j, r-lo-j}`, valid if `a < b <= n`.

The common part `s_comp = s_c ^ s_p1 ^ ... ^ s_pk` is formed by the
controller. Each lane adds its two columns and NOR-reduces. With
`W = (LW_max-1)/2 = 47` lanes, every pair split of any `r <= 96` fits in one
cycle. All lanes of a group have the same LW, so the logistic-weight order of
ORBGRAND is kept exactly. Within one LW the order is: prefix size
`k = 0, 1, ...`, then prefixes in lexicographic order, then lane order.

**Walking the prefixes.** For the current `m` and prefix size `k`, the
controller moves to the lexicographically next prefix. It increments the
rightmost slot `j` for which the smallest completion still fits. The slots
after `j` are reset to consecutive values, and the result must satisfy
`m - sum >= 2*top + 3` (two more distinct parts above `top`). All `k`
candidates are evaluated in parallel. When no prefix of size `k` remains,
`k` grows, as long as `k+2 <= Delta` and `1..k+1` fits. After that `m`
grows, as long as `m <= Lambda`, and otherwise the search ends.

**LGRAND limits.** On the first hit of a frame, `Lambda` becomes
`min(m + delta, lw_max)` and `Delta` becomes the hit's Hamming weight (1 for
lane 0, `k+2` otherwise). The limits are set once. Later hits only add
candidates. Because lower Hamming weights come first within a logistic
weight, `Delta` is the smallest Hamming weight of any codeword TEP at that LW.

**Several hits in one group.** Every codeword has to reach the list. A group
with more than one satisfied lane is therefore evaluated again in the next
cycle, with the lanes already reported masked. That costs one cycle per extra
hit.

**Worked example** (n = 12, LW <= 12, HW <= 4, delta = 2). Suppose the only
codeword TEP is {3,5}. The groups up to LW 7 test 18 TEPs. The LW-8 group with
an empty prefix tests {8}, {1,7}, {2,6} and {3,5}, and the hit sets
`Lambda = 10` and `Delta = 2`. The HW-3 groups of LW 8 are skipped. LW 9 and
LW 10 test 5 TEPs each, which gives 32 TEPs in all. Without the hit, all 69
TEPs of LW <= 12, HW <= 4 are tested. The testbenches check both counts.

## Likelihood and list selection

`mlcu` forms `(-1)^{c_i} y_i` for every bit by XORing `c_i` into the sign of the
sign-magnitude value (`smto2c`). It adds the n terms in a balanced tree of
`log2 n` stages, one bit wider per stage (Q+1 ... Q+7 = 12 bits for n = 128),
and converts the sum back to sign-magnitude (`twoc_to_sm`). The metric of the
hard decision is `sum |y_i|`, and each flipped bit subtracts `2|y_i|`. A
candidate found in cycle t sits in the candidate register in cycle t+1. Its
metric is computed in that cycle, and at the end of it the decoder keeps the
candidate if it is the first one, or if its metric is strictly larger than the
kept one's (`sm_gt`, where +0 equals -0). On equal metrics the earlier
candidate stays.

## Interface and timing

Channel values are `Q = 5`-bit sign-magnitude numbers. The MSB is the sign, and
1 means a negative LLR, which gives a hard decision of 1. The magnitude has 3
fractional bits, but the decoder does not care where the binary point is.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `h_load`, `h_rows_in` | in | 1, NK x N | load the parity check matrix (row j, bit i = `H[j][i]`); unused rows zero |
| `cfg_lw_max`, `cfg_hw_max`, `cfg_delta` | in | 14, 4, 5 | limits for the next frame, clipped to `LW_MAX`/`HW_MAX` |
| `start`, `y` | in | 1, N x Q | start a frame while `busy` is low; `y` is captured |
| `busy` | out | 1 | frame in progress |
| `done` | out | 1 | one-cycle pulse: result valid |
| `success` | out | 1 | a codeword was found (or `yhat` already was one) |
| `c_final`, `u_hat` | out | N | decoded codeword; `yhat` on failure |
| `queries` | out | 32 | TEPs tested in the frame |
| `list_size` | out | 16 | codewords found |

A frame goes through these cycles:

* Cycle 0 (`start`): the syndrome of the incoming hard decision is computed.
  If it is zero, `done` comes in the next cycle. This one-cycle case is what
  sets the average latency at high SNR.
* Otherwise, one sorting cycle registers `Ind` and the sorted columns.
* Then the search runs: one cycle per group, plus one for each extra hit in
  a group.
* One drain cycle lets the last candidate's metric be compared.
* Then `done` comes.

Results hold until the next `start`. The H memory must not be reloaded during
a frame.

`u_hat` equals `c_final`. Recovering the k message bits (`c * G^-1`) is left to
the user of the decoder. For a systematic code it is a bit selection.

**Codes shorter than 128.** For n = 127, load an all-zero column for position
128 and give that channel the largest magnitude, so that it sorts to rank 128,
beyond any LW <= 96. The same trick works for shorter codes only if `lw_max`
stays at or below n, because the padding ranks must never be reached.

## Sizes and throughput

| | This RTL | Paper's implementation |
|---|---|---|
| n, n-k, Q | 128, <= 32, 5 | same |
| LW, HW, delta | <= 96, <= 8, <= 30 (run time) | same |
| latency when `yhat` is a codeword | 1 cycle | 2.2 ns average at high SNR, i.e. 1 cycle at 454 MHz |
| worst-case latency, LW <= 96, HW <= 8 | 468,097 cycles (468,094 groups + start, sort, drain) | 93,415 cycles (205.76 us at 454 MHz) |
| TEPs in that worst case | 3,107,281 | (3.69e6 quoted for LW <= 96 without HW limit) |

The group structure tests at most 48 TEPs per cycle. Groups with long
prefixes hold few pairs, however, so the worst case takes about five times as
many cycles as the published design. The paper does not describe how its core
reaches about 40 TEPs per cycle on average. At the SNRs where GRAND decoders
operate, most frames end after one cycle or a few tens of cycles. In the
n = 128 test, frames with 1 to 3 weak errors take 29 to 161 cycles.

## What follows the paper and what is this design's own

From the paper:

* the LGRAND algorithm: the `delta` window, the Hamming weight restriction
  and selection by `sum (-1)^{c_i} y_i`;
* the blocks and their widths: H memory `(n-k) x n`, sorter outputs
  `Ind` (`n x ceil(log2 n)`) and `s` (`n x (n-k)`), `P` index
  multiplexers, word generator, and MLCU with SMto2C, a `log2 n`-stage adder
  tree and 2CtoSM;
* the one-bit-syndrome XOR/NOR/priority-encoder principle;
* the one-cycle decode of a hard decision that is already a codeword (the
  published average latency of 2.2 ns is one cycle at 454 MHz);
* the replace-only-if-strictly-larger rule and the absence of a list memory;
* the default sizes.

This design's own choices:

* the grouping of TEPs by prefix, the prefix walk and the order within one
  logistic weight;
* masking for several hits in a group;
* selecting columns by index instead of the shift registers the paper
  mentions;
* a combinational sorter registered in one cycle;
* the frame protocol and the phases;
* run-time limit inputs;
* tie-breaking by channel index in the sorter;
* the metric being 0 when the MLCU is not enabled;
* returning `yhat` on failure;
* the `queries` and `list_size` outputs.

The paper's algorithm listing applies the limit update whenever
`Lambda == LW_max`. Its text says the limit comes from the first codeword
found. This RTL follows the text, and the two only differ when
`i + delta >= LW_max`.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares against
values computed in the testbench and prints
`TB_RESULT checks=<n> failures=<m>`.

* `tb_controller` replaces the decoding core. It checks the following:
  * every distinct partition with LW <= L, HW <= H, parts <= n is requested
    exactly once, in non-decreasing LW (69 TEPs for n = 12, LW 12, HW 4;
    2049 for LW 40, HW 6);
  * the worked example above (32 TEPs, `Lambda` = 10, `Delta` = 2);
  * masking of several hits in a group;
  * the 1-cycle path.
* `tb_orbgrand_decoder` runs the same examples through the real datapath:
  * 63 and 13 TEPs for n = 6 with LW <= 21 and LW <= 6;
  * 32 and 69 TEPs for n = 12;
  * a group with two codewords, where the more likely one replaces the
    first.
* `tb_lgrand_top` runs 400 random frames at n = 16 with 6 parity checks
  against a behavioural LGRAND reference (`tb/lgrand_ref_pkg.sv`). The
  reference enumerates partitions by logistic weight with no knowledge of the
  group schedule. The testbench checks the success flag, the list size, and
  that the output is a codeword with the reference's best metric. It also
  counts that each mechanism occurs: bypass, limit update, lists longer than
  one, replacement, several hits per group, failure and H reload.
* `tb_lgrand_full` uses the default parameters (n = 128). It loads a random
  systematic (128,104) code with one planted weight-3 codeword. It decodes
  13 frames with LW 96, HW 8 and delta 24/25 against the same reference:
  * a received codeword (1 cycle);
  * frames with 1 to 5 weak errors (29 to 9,285 cycles);
  * a frame that yields a list of two;
  * a frame with 16 strong errors that runs the whole search. That frame
    checks the worst case: 3,107,281 TEPs in 468,097 cycles.

  It simulates in about 5 seconds.

To simulate with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/lgrand_pkg.sv \
    tb/lgrand_ref_pkg.sv tb/tb_lgrand_top.sv --top-module tb_lgrand_top
./obj_dir/Vtb_lgrand_top
```

Replace the testbench name to run any other bench. `tb_lgrand_full` and
`tb_lgrand_top` need `tb/lgrand_ref_pkg.sv`. The other benches need only
`rtl/lgrand_pkg.sv`.

**Limits of the verification.** No real BCH, CRC or polar parity check
matrices were used; the codes are random systematic codes. The error-rate
curves of LGRAND were not reproduced. No gate-level netlist was simulated, so
area and clock frequency are unknown.
