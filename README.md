# Statistical ABFT for a systolic-array accelerator

Running an accelerator below its worst-case voltage guardband saves energy. The
cost is occasional timing errors in the multiply-accumulate (MAC) units.
Algorithm-based fault tolerance (ABFT) finds such errors cheaply. It adds
checksums to a matrix product Y = W X: the sum of the outputs, e^T Y, must equal
e^T W X, the product of the weight column sums with the inputs. Classic ABFT
recomputes on every mismatch. Neural networks, and large language models in
particular, shrug off most small or rare errors, so most of those recomputations
are wasted.

This RTL implements *statistical* ABFT. The checksum hardware is kept, but the
mismatches of a whole window are collected and judged together. Recomputation is
requested only when the errors land in a *critical region*: deviations large
enough, and frequent enough, to hurt the model. The region is set by three
run-time numbers, a, b and θ_freq. They are fitted offline for each kind of
layer.

* Sensitive layers are those followed by a normalisation, such as the attention
  output and FFN down projections. Here one large error is already too much
  (θ_freq = 0).
* Resilient layers, such as the Q/K/V projections, tolerate sporadic large errors
  and frequent small ones (θ_freq > 0).

The accelerator has both common systolic dataflows, weight stationary (WS) and
output stationary (OS), each with its own checksum hardware. One statistic unit
serves both.

## Block structure

```
                    realm_abft_top
   ┌───────────────────────────────────────────────────────────┐
   │  abft_ws_array (mode = WS)         abft_os_array (mode = OS)│
   │  N x N ws_pe + checksum column      N x N os_pe + adder column│
   │  + e^T*y adder row                  + checksum-PE row + e^T*Y │
   │        │ (e^T*y, e^T*W*x)                  │ (e^T*Y_j, e^T*W*X_j)
   │        └──────────────┬──── mode mux ──────┘               │
   │                       ▼                                     │
   │                  stat_unit ── log2_linear                   │
   │                       │                                     │
   └───────────────────────┼─────────────────────────────────────┘
                           ▼  stat_done, recompute, stat_result
```

| module | role |
|---|---|
| `realm_pkg` | widths, `dataflow_e`, `chk_pair_t` (one checksum comparison), `stat_result_t` |
| `ws_pe` | WS MAC: holds a weight, activation moves right, partial sum moves down |
| `os_pe` | OS MAC: accumulates locally, weight moves right, activation moves down, results shift down when draining |
| `abft_ws_array` | WS array with checksum PE column and e^T y adder row |
| `abft_os_array` | OS array with weight-checksum adder column, checksum PE row, e^T Y accumulators and the tile FSM |
| `log2_linear` | threshold θ_mag from the window's total deviation |
| `stat_unit` | deviation, MSD, buffer, count above θ_mag, decision |
| `realm_abft_top` | both arrays, mode selection, shared statistic unit |

Default sizes: N = 16 (a 16 × 16 array), a 32-entry statistics buffer, signed
8-bit weights and activations, 24-bit PE accumulators, a 16-bit weight checksum
and 32-bit output checksums.

## How the checksums arise in each dataflow

### Weight stationary (`abft_ws_array`)

PE(r,c) holds W[c][r]. Activation x[r] enters row r from the left. Partial sums
run down the columns, so column c produces y[c] = Σ_r W[c][r]·x[r].

* **Checksum column.** A column of wider PEs sits to the right of the array. The
  PE in row r holds Σ_c W[c][r]. The activations simply continue into it, so its
  bottom output is e^T W x.
* **Adder row.** A row of registered adders sits below the array. Stage c adds
  y[c] to the running sum from stage c−1. Column c's output leaves one cycle after
  column c−1's, so each stage's register lines up the next addition. The last
  stage delivers e^T y in the same cycle as the checksum column delivers e^T W x.

The array skews the inputs (row r waits r cycles) and deskews the outputs
internally. A vector presented at cycle t therefore comes out at cycle t + 2N as
the whole y vector, e^T y and e^T W x, marked by `out_valid`. One vector is
accepted per cycle. `x_last` marks the end of a statistics window and travels
with the vector.

Weights are written one array row per cycle: `w_row = r` carries the N weights
that multiply x[r]. The checksum PE of that row is loaded in the same cycle with
their sum, formed by an adder in the array.

### Output stationary (`abft_os_array`)

PE(i,j) accumulates Y[i][j]. Operand k arrives as a column of W and a row of X.
The array delays W[i][k] by i cycles and X[k][j] by j cycles, so the two meet
in PE(i,j).

* **Weight-checksum column.** A chain of registered adders sits on the left. Each
  stage adds the weight entering its row to the sum from above. Because the
  weights are skewed by row, each stage meets the right partial sum. The chain
  ends in the 16-bit e^T W[·][k].
* **Checksum PE row.** A row of checksum PEs sits under the array. The chain's
  output feeds it from the left, and each column's activations continue into it
  from above. PE j accumulates (e^T W X)[j].
* **e^T Y accumulators.** Under the checksum row, one 32-bit accumulator per
  column adds up that column's results while they are drained.

A tile runs through a small FSM:

| phase | length | what happens |
|---|---|---|
| IDLE | until `start` | `start` clears all accumulators |
| FEED | K operand cycles | `in_valid` operands; `in_last` ends the tile |
| FLUSH | 2N cycles | last operands travel to the far corner and to the checksum row |
| DRAIN | N cycles | every column shifts down one PE per cycle; `y_data` shows row N−1 first, `y_row` is its index; e^T Y accumulates |
| CHECK | N cycles | the N pairs (e^T Y_j, e^T W X_j), one per cycle, `chk_last` on j = N−1 |

The N pairs of one tile form one statistics window.

## The statistic unit

For every checksum pair the unit forms the deviation d = e^T Y − e^T W X. The
magnitude |d| (33 bits) goes two places:

* into MSD, a saturating 40-bit running sum of |d| over the window;
* into the next free slot of the 32-entry buffer.

The pair flagged `in_last` closes the window. Two cycles follow:

1. **θ cycle.** `log2_linear` turns MSD into the magnitude threshold θ_mag.
2. **count cycle.** All buffer entries are compared with θ_mag in parallel. The
   number above it is freq_eff. The verdict is
   `recompute = freq_eff > θ_freq`.

`done` pulses in the second of these cycles, 3 cycles after the last pair was
presented. The verdict stays on `result` until the next window closes. While the
window is closing, `ready` is low. In WS mode the top closes its activation input
(`ws_x_ready`) for these 2 cycles after each `ws_x_last`. In OS mode the phases of
the tile leave enough room. A concurrent assertion in the top checks that no pair
is ever offered to a busy statistic unit.

If a window has more than 32 pairs, all of them still add to MSD. Only the first
32 are buffered and counted, and `result.overflow` is set.

### The threshold

The critical region's boundary is a straight line in log–log coordinates:
log2(freq) = a·log2(MSD) − b. The unit applies the same linear form to get the
magnitude threshold:

    log2(θ_mag) = a · log2(MSD) − b

The arithmetic is fixed point:

* **log2(MSD)** uses Mitchell's approximation. The position of the leading one is
  the integer part; the 4 bits below it are the fraction (UQ6.4). MSD = 0 gives 0.
* **Coefficients.** a is unsigned Q2.6: `cfg_a = 64` means 1.0, and the range is
  0 to 3.98. b is signed Q7.4: `cfg_b = 16` means 1.0.
* **The product** a·log2(MSD) has 10 fraction bits. b is aligned to it and
  subtracted.
* **Back to linear.** 2^t is formed as (1 + frac) shifted left by the integer
  part, keeping 4 fraction bits, then truncated to an integer. t < 0 gives
  θ_mag = 0, so every nonzero deviation counts. An exponent of 33 or more
  saturates θ_mag to all ones.

Examples, all checked by the testbenches:

* a = 1.0, b = 0 gives θ_mag = MSD for powers of two.
* a = 1.0, b = 4.0 on MSD = 2^24 gives 2^20.
* a = 0.5 on MSD = 2^30 gives 2^15.

### Choosing a, b and θ_freq

* **Sensitive layer**, for example θ_freq = 0, a = 1, b = 4. Take one deviation of
  2^22 in a window of otherwise clean pairs. Then MSD = 2^22 and θ_mag = 2^18, so
  freq_eff = 1 > 0 and the window is recomputed.
* **Resilient layer**, for example θ_freq = 6, a = 1, b = 2. Ten deviations of 4
  give MSD = 40 and θ_mag = 10. They are not counted, and the window is accepted.
  A few deviations of 2^20 among many small ones are also accepted as long as at
  most 6 exceed θ_mag.

The numbers must be fitted per task and layer type from an error-injection study
of the model. The hardware takes them as plain inputs.

## Fault injection

Timing errors are not visible in a zero-delay simulation, so both arrays have a
fault-injection port. When `inj_en` is set, `inj_mask` is XORed into the
partial-sum or accumulator register of PE(`inj_row`, `inj_col`) in that cycle:

* In the WS array, `inj_col = N` selects the checksum PE. The vector presented at
  cycle t is in PE(r,c) at cycle t + r + c.
* In the OS array, `inj_row = N` selects the checksum row.

An error in an ordinary PE changes y and e^T y. An error in a checksum PE changes
only e^T W x. Tie `inj_en` low in a real system.

## Numeric limits

* PE arithmetic wraps modulo 2^24. One pass reduces N = 16 products of 8 × 8 bits,
  which needs 20 bits, so a pass never overflows. Longer reductions, such as the
  2048- to 4096-long dot products of LLM projections, need 27–28 bits. They must be
  split into passes and the partial results added outside the array.
* The checksums are 32 bits. With the defaults, e^T W x needs at most
  8 + 8 + 4 + 4 = 24 bits and cannot wrap.
* The weight checksum is 16 bits. A sum of N 8-bit weights fits for N ≤ 256.

## What is built as described, and what is this design's own

Taken from the source design:

* the MAC widths: 8-bit multiplier, 24-bit accumulator;
* the checksum widths: 16-bit e^T W, 32-bit e^T W x and e^T y;
* the WS arrangement: a checksum PE column on the right and an adder row at the
  bottom;
* the OS arrangement: an adder column on the left, a checksum PE row at the bottom
  and e^T Y accumulators;
* the statistic unit's chain: subtract, accumulate MSD, buffer, log-linear
  threshold with coefficients a and b, count above θ_mag;
* the principle that recomputation is requested only for errors in the critical
  region.

Choices made here, where the source is silent:

* **Sizes.** N = 16 and a 32-entry buffer.
* **Interfaces.** The weight-load interface, the skew/deskew registers, the OS
  tile FSM and its drain order, and the window delimiting by a `last` flag.
* **Weight checksums** are computed by an adder while the weights are loaded.
* **Magnitudes.** MSD accumulates |d| and the buffer stores |d|. A plain signed
  sum would let errors of opposite sign cancel.
* **The threshold formula** log2(θ_mag) = a·log2(MSD) − b, with Mitchell
  log/antilog and the fixed-point formats above.
* **The decision** freq_eff > θ_freq, with θ_freq as an input. It is the
  frequency bound of a resilient layer's critical region; for sensitive layers it
  is 0.
* **Both arrays are instantiated**, with a run-time `mode` input. A production
  design would more likely share one PE grid between the dataflows; how the two
  coexist is not specified.
* **The 2-cycle WS input stall** after each window.
* **The fault-injection ports.**
* **Reset.** All state clears on an asynchronous active-low reset.

## Not in the RTL

* **Timing analysis.** The aging- and variation-aware dynamic timing analysis used
  to find the voltage/frequency points is an EDA flow on a netlist, not a
  hardware block.
* **Weight reordering.** The reordering that lowers the timing error rate is done
  offline. Input channels are sorted by their fraction of positive weights, and
  output channels are clustered by weight sign pattern before that. Its only
  effect on this hardware is the order in which weight rows are loaded: it
  permutes the array rows (and the matching activations) of the WS array and
  leaves results and checksums unchanged. `tb_read_reorder` shows the effect on
  the partial-sum sign flips that cause the long carry chains.
* **Recomputation.** The array only raises `recompute`. Re-fetching and
  re-running the tile, possibly at a safer voltage, is left to the surrounding
  system.
* **Memories and feeders.** Weight/activation memories, tiling control and the
  host interface are not part of this design.
* **Overhead.** No area or power figures are claimed for this RTL. The source
  reports about 1.4 % area and 1.8 % power over an unprotected array; that has not
  been reproduced here.

## Simulating

Every testbench in `tb/` checks itself. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. To run one with
Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/realm_pkg.sv tb/tb_realm_abft_top.sv --top-module tb_realm_abft_top
    ./obj_dir/Vtb_realm_abft_top

| testbench | what it checks |
|---|---|
| `tb_ws_pe` | MAC arithmetic against a 64-bit reference, the sign-flip example 3·(−2)+2 = −4 (`1111…1100`), extreme operands, the 16/32-bit checksum-PE configuration, the injection mask |
| `tb_os_pe` | accumulation with valid gaps, clear, drain priority, forwarding, injection |
| `tb_abft_ws_array` | y, e^T y and e^T W x for 48 vectors against a reference product; the 2N latency and `out_last`; errors injected into a PE and into a checksum PE show up where they should |
| `tb_abft_os_array` | tiles with K = 1, 7, 12 and 40; Y, drain order, the lengths of FLUSH (2N), DRAIN (N) and CHECK (N), the checksum pairs, injected errors |
| `tb_log2_linear` | exact powers of two, hand-worked points, negative and saturating exponents, 3000 random points against an integer reference |
| `tb_stat_unit` | clean, sensitive, resilient, small-error, overflowing, extreme and 60 random windows against a reference model; verdict latency and the `ready` gap |
| `tb_realm_abft_top` | the whole accelerator at its default size: three WS windows (clean; one large error under the sensitive setting; 40 vectors with small errors under the resilient setting), a switch to OS mode, a clean and a faulty OS tile. Every output and verdict is compared with reference models. It counts the WS input stall, detected mismatches, recomputation requests, tolerated errors, buffer overflow, the mode switch and the OS drain, and fails if any of them never occurred |
| `tb_read_reorder` | operand order and partial-sum sign flips, see below |

Verilator has two-state simulation, so every register is reset.

### Operand order and sign flips (`tb_read_reorder`)

A partial sum that changes sign toggles every upper bit of the accumulator. That
activates its longest carry paths, which are the first to fail when the voltage
margin is cut. The order of a reduction does not change its result, but it does
change how often the partial sum changes sign. With non-negative (post-ReLU)
activations, putting input channels with mostly positive weights first keeps the
partial sum positive for longer.

The testbench shows this on the RTL, counting sign bits of the partial sums
inside the WS array's columns. For each run it checks the count against a
software reference, and checks the outputs against the product.

* **Single PE.** A 1 × 4 convolution on one PE gives partial sums 0, −3, 1, −9, 12
  (4 flips). With the negative weights last it gives 0, 21, 25, 22, 12 (no flips).
* **4 × 4 matrix.** With rows sorted by their share of positive weights, 200
  random vectors give 899 flips in the original order and 461 after sorting.
* **4 × 8 matrix, two 4-column tiles.**

  | how the tiles are formed | sign flips |
  |---|---|
  | columns split as given, no reordering | 2225 |
  | split as given, then reordered | 967 |
  | output channels grouped by sign pattern ({0,2,5,6}, {1,3,4,7}), then reordered | 665 |

These are sign-flip counts, not timing error rates. A timing error rate needs
gate-level timing of a synthesised MAC, which is outside this RTL.

## Size

These are word-level cell counts after coarse synthesis at the default size.
Every adder, multiplier or multiplexer counts as one cell.

| module | cells | flip-flop bits |
|---|---|---|
| `ws_pe` | 5 | 40 |
| `os_pe` | 9 | 41 |
| `abft_ws_array` (N = 16) | 2259 | 15776 |
| `abft_os_array` (N = 16) | 3138 | 13576 |
| `log2_linear` | 52 | 0 |
| `stat_unit` (32 entries) | 463 | 1223 |
| `realm_abft_top` | 5847 | 30577 |

In the WS array, the 256 PEs' own registers (40 bits each) are about two thirds of
the flip-flops. The rest are the input skew, the output deskew and the checksum
column.
