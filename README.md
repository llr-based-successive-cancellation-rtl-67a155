# Multi-bit LLR successive-cancellation list decoder for polar codes

This is SystemVerilog RTL for a successive-cancellation list (SCL) decoder for polar codes.
It works only on log-likelihood ratios (LLRs) and decides **2^K bits at a time**. A plain
SCL decoder walks the code tree one bit per step. At every bit it doubles each of its L paths
and keeps the L best. This decoder does the same thing, but one step covers a block of 2^K
bits. The last K stages of every SC decoder are removed. In their place a *metric computation
unit* (MCU) reads the 2^K LLRs that the remaining stages produce and computes the metric of
all 2^(2^K) ways to extend the path over the block, in one cycle. The list then needs
N/2^K steps instead of N.

The architecture follows B. Yuan and K. K. Parhi, "LLR-based Successive-Cancellation List
Decoder for Polar Codes with Multi-bit Decision". This RTL is an independent implementation:
where that description stops, the choices made here are stated below and in each file's header.

Default configuration: a (1024, 512) code, list size L = 4, K = 3 (8 bits per list step), 64
processing elements (PEs) per path, 6-bit LLRs, 8-bit path metrics, and 7-bit comparators in
the sorter. One frame takes **546 clock cycles** from `start` to `done`.

## 1. Code and decoding tree

The code is the natural-order polar code x = u·F^{⊗m}, with F = [1 0; 1 1] and m = log2 N.
For N = 4 this gives x1 = u1⊕u2⊕u3⊕u4, x2 = u2⊕u4, x3 = u3⊕u4 and x4 = u4. Frozen positions
carry 0. The decoder takes them as an N-bit mask, so any code construction can be used.

SC decoding walks a binary tree. The root (level 0) is the N channel LLRs. A node at level l
holds N/2^l LLRs. Its left child is computed with

    f(a,b) = sign(a)·sign(b)·min(|a|,|b|)

and its right child with

    g(a,b,β) = b + (−1)^β · a

Here a and b are the two halves of the parent, and β is the re-encoded bit vector ("partial
sum") of the left child that has already been decided. This design keeps levels 1 … m−K.
A level-(m−K) node holds exactly 2^K LLRs s_1 … s_2^K. These are the LLRs of the bits
out = α·U of one 2^K-bit block, where α are the block's u bits and U = F^{⊗K}.

## 2. Metric of a 2^K-bit extension (MCU)

A path's metric is the log-probability of its decided bits. It is never positive, and larger
is better. Extending a path with metric M(z) by the block α gives

    M(α) = M(z) + Σ_j [ s_j·(1 − out_j) − δ(s_j) ],   δ(s) = max(s, 0)

This follows from the exact log-probability by approximating ln(1+e^x) with max(x, 0). Each
LLR adds one of two terms:

* t0_j = s_j − δ(s_j) = min(s_j, 0) when out_j = 0
* t1_j = −δ(s_j) = −max(s_j, 0) when out_j = 1

So a bit that agrees with the sign of its LLR costs nothing. A bit that disagrees costs |s_j|.

`rtl/mcu.sv` builds all 2^(2^K) sums with a shared tree:

* Level 0 holds the two terms of each LLR.
* Level g holds, for every group of 2^g consecutive LLRs, the sum for each of the 2^(2^g)
  possible out-patterns over that group. Each of these sums is one addition of two level-(g−1)
  entries.
* Level K holds the sum for every out-vector. Candidate α then picks the entry at out = α·U,
  which is a fixed wiring. The parent metric is added last.

δ is a multiplexer on the sign bit. The LLRs and the metric come in through sign-magnitude →
two's complement converters. Each result goes out through a saturating two's complement →
sign-magnitude converter.

## 3. Zero forcing and survivor selection

**Zero-forcing unit (ZFU, `rtl/zfu.sv`).** A candidate is dropped if it puts a 1 on a frozen
position of its block, or if its parent is not a live path. A dropped candidate gets a cleared
*valid* flag, and a multiplexer sets its metric word to the most negative value. The sorter
ranks on the flag first. This way a dropped candidate never ties with a live path whose metric
has saturated to the same word.

**Sorter (`rtl/metric_sorter.sv`).** It chooses the L best of the L·2^(2^K) candidates
(1024 at the defaults). Metrics are stored and updated with M = 8 bits. The comparators use
only S = M−1 = 7 bits: the LSB of every candidate is dropped before comparison. Ranking only
needs coarse precision, and the narrower comparators shorten the critical path. Selection runs
in L rounds of a binary max tree over the candidates that are valid and not yet taken. On equal
7-bit keys the lower candidate index wins. The index encodes parent·2^(2^K) + α, so path
p = 0 wins over p = 1, and the numerically smaller α wins within a path. The r-th winner
becomes list entry r.

**List start.** A frame starts with **one** live path (entry 0, metric 0). The other L−1
entries start dead. If all L entries started as live copies of the same empty path, the sorter
would fill the list with L copies of the best candidate forever. The first few steps then
grow the list naturally.

**Final choice.** When the last block is done, the live path with the largest full 8-bit
metric (lowest index on a tie) goes to `u_hat`.

## 4. Keeping L paths: registers, LLR banks and pointers

This is the part the block diagram leaves implicit, and the part to read before changing the
control. After every sorting step, each survivor r is a copy of some parent path q, extended by
α_r. The copy has to cover four kinds of state.

| State | Where | How a survivor gets its parent's copy |
|---|---|---|
| Metric and live flag | `pm_reg_array` (registers) | written with the chosen candidate's metric |
| Decided bits u | `sp_reg_array` (L × N registers) | full L:1 copy, block `blk` replaced by α |
| Partial sums β | `psum_reg_array` (L × N registers) | full L:1 copy, then merge α·U (below) |
| Tree LLRs | `llr_mem`, one bank per path | **not copied**: pointers are copied instead |

**LLR banks and pointers.** Each path has its own LLR bank. Bank p always holds the latest
node path p computed at each level l = 1 … m−K. The decoder keeps a pointer `ptr[p][l]` for
each path and level. It names the bank that holds the level-l node that path p should use.

* When path p computes a level, it writes its own bank and sets `ptr[p][l] = p`.
* When survivor r is taken from parent q, it inherits all of q's pointers. It therefore reads
  q's data until it has recomputed that level itself.

All paths move through the tree in lock step. After leaf block i, the next block starts at
level l0 = m−K − ctz(i+1), where ctz counts trailing zeros. Every level from l0 down is
recomputed before it is read. The only older data that is read is level l0 − 1, and in this
step no path writes that level. So a bank is never overwritten while another path still points
at it. All banks are read at the same address in the same cycle, so one read port per bank is
enough: each path only chooses *which* bank's output to use.

**Partial sums.** For each path and level l, the array holds the β of the most recent left
child at that level. When a block is decided, the leaf's β is α·U. The merge walks up the tree:

* At a left child, it stores β and stops.
* At a right child, it combines β with the stored left sibling into [β_left ⊕ β, β], which is
  the parent's β, and carries that one level up.

The g operation at level l reads P bits of the stored left-sibling β for the current chunk.

## 5. Schedule and latency

There is one shared controller (inside `llr_scl_decoder`), and all paths run the same
schedule. For each leaf block i:

1. **NODE.** The nodes from level l0 down to level m−K are computed. The first node is a g
   node (for i > 0); the rest are f nodes. All L PE arrays work in parallel. A node of size
   N′ takes max(1, N′/P) cycles, one P-wide chunk per cycle, and is written straight into the
   path's own bank.
2. **MCU.** Each path's 2^K leaf LLRs and its metric give the candidates. The ZFU applies
   the block's frozen pattern, and the candidates are registered.
3. **SORT.** The L survivors are chosen. Metrics, bits, partial sums and pointers are updated
   in one clock edge.

After the last block, **OUT** loads `u_hat` and pulses `done`. Putting the MCU and the sorter
in separate cycles balances the datapath. The latency from the clock edge that samples `start`
to the edge that raises `done` is

    T = Σ_{l=1}^{m−K} 2^l · max(1, N / (2^l·P))  +  2·N/2^K  +  2

| N | K | P | tree cycles | list steps × 2 | T (this RTL) | published figure |
|---|---|---|---|---|---|---|
| 1024 | 3 | 64 | 288 | 256 | **546** | 546 |
| 1024 | 2 | 64 | 544 | 512 | 1058 | 1056 |

Loading the channel buffer takes another N/P = 16 cycles before `start`. This design does not
overlap loading with decoding.

## 6. Number formats

* LLRs are Q = 6-bit sign-magnitude, range ±31. Positive means "bit 0 is more likely".
* Path metrics are M = 8-bit sign-magnitude, range ±127.
* The f unit works directly on sign and magnitude. The g unit and the MCU convert to two's
  complement, add, and convert back.
* **Overflow saturates**: g results at ±31, metrics at −127. There is no metric normalisation.
  At low SNR, metrics of long frames do reach −127. The testbench shows this at 1 dB and below
  for N = 1024. From then on, those paths are ranked only through the sorter's tie rule.
* The widths live in `rtl/polar_pkg.sv` (Q, M and S = M−1).

## 7. Interface of `llr_scl_decoder`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control and metric registers |
| `ch_we`, `ch_addr`, `ch_data` | in | 1, log2(N/P), P×6 | write P channel LLRs (word `ch_addr` = LLRs `ch_addr·P …`); accepted only while idle |
| `frozen` | in | N | bit i set: u_{i+1} is frozen; hold it stable for the whole frame |
| `start` | in | 1 | begin decoding (sampled while idle) |
| `busy` | out | 1 | frame in progress |
| `done` | out | 1 | one-cycle pulse; `u_hat` valid from then until the next `done` |
| `u_hat` | out | N | decided u_1 … u_N (bit i = u_{i+1}), frozen bits included |

Parameters: `N` (code length, a power of two), `K`, `L` (a power of two, at least 2) and `P`
(a power of two, at most N/2). The register and sorter cost grows as L·2^(2^K), so K = 3 is
the practical maximum.

## 8. Files

`rtl/` holds the following:

* `polar_pkg.sv`: word formats, converters, kernel helper, control state type.
* `pe.sv` and `pe_array.sv`: the f/g processing element, and P of them side by side.
* `mcu.sv`, `zfu.sv` and `sc_component.sv`: the metric unit, the zero-forcing unit, and one
  component decoder built from PE array + MCU + ZFU.
* `metric_sorter.sv`: reduced-width L-best selection.
* `pm_reg_array.sv`, `sp_reg_array.sv` and `psum_reg_array.sv`: the per-path registers.
* `llr_mem.sv` and `channel_buffer.sv`: the LLR bank and the channel LLR store.
* `llr_scl_decoder.sv`: the top, with the controller and the pointer table.

`tb/` holds a self-checking testbench `tb_<module>.sv` for every module except the package.
`tb/scl_ref_pkg.sv` is the reference model.

## 9. Verification

* **Unit tests.** Each unit testbench compares the block with values computed independently
  in the testbench:
  * PE: all 16384 combinations of operands and controls.
  * MCU and ZFU: equation (8) and the frozen rule, on all candidates.
  * Sorter: a software L-best with the same 7-bit key and tie rule, including rounds that are
    full of ties or nearly empty.
  * Registers and memories: software copies.
  * Partial sums: the polar re-encoding of each path's bits under the next g node.
* **End-to-end tests** (`tb_llr_scl_decoder` at the default size, `tb_llr_scl_decoder_k2` with
  K = 2). Each builds a (1024, 512) code from Bhattacharyya parameters. It encodes random
  frames, passes them through BPSK/AWGN from noiseless down to −2 dB Eb/N0, and quantises them
  to 6-bit LLRs. The decoder's decision and final metric must match `scl_ref_pkg` bit for bit.
  That model is written differently: for every path and block it recomputes the leaf LLRs from
  the channel, re-encoding the sibling's bits for each g step. The tests also check the
  following:
  * The noiseless frame must come back exactly.
  * The latency must equal the formula above.
  * Each mechanism must occur at least once: a survivor copied from another path, a read
    through an inherited pointer, a candidate removed by zero forcing, a dead list entry, and a
    saturated metric.

  Both tests pass at 546 and 1058 cycles. Frames down to 2 dB decode correctly. At 1 dB and
  below they are decoded exactly as the reference does, but not to the transmitted word.
* **Not verified:** frame error rate curves. The testbenches decode six frames each. Nothing
  here has been synthesised to gates, so there are no area or clock-frequency results.

To run one test with Verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_llr_scl_decoder \
        rtl/polar_pkg.sv tb/scl_ref_pkg.sv tb/tb_llr_scl_decoder.sv
    ./obj_dir/Vtb_llr_scl_decoder

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. Unit tests are built the same way
from `rtl/polar_pkg.sv tb/tb_<module>.sv`. The full-size decoder builds in about a minute and
simulates a frame in well under a second.

## 10. Where this RTL goes beyond or departs from the published description

* **Added to make it work**, because the published description does not specify them:
  * the tree schedule and controller;
  * the per-path pointer scheme for LLR banks;
  * the partial-sum registers;
  * the sorter's internal structure and tie rule;
  * the load/start/done interface;
  * saturation on overflow.
* **One live path at the start**, where the published scheme initialises every path's metric
  to 0 (see section 3).
* **Zero forcing** drops candidates with a 1 on a frozen position. The published scheme's
  pseudo-code line states the opposite bit value, which is read here as a typo, since frozen
  bits are 0.
* **Memories** are register arrays with combinational read. A real implementation would use
  SRAM for the LLR banks and the channel buffer, and would then need an extra read cycle or
  prefetch in the schedule.
* **Bit order**: natural order x = u·F^{⊗m} with no bit-reversal permutation.
* **Latency for K = 2** is 1058 cycles against a published 1056. The same formula matches
  the published K = 3 figure exactly, so the source of the 2-cycle gap is not known.
