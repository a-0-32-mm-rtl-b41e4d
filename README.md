# MAED: a jammer-resilient SIMO detector in SystemVerilog

A single-antenna user sends a block of K = 32 QPSK symbols to a base station with B = 8 receive
antennas. The first T = 4 symbols are known pilots. The other D = 28 carry 56 data bits. A jammer
with its own unknown spatial signature transmits at the same time, possibly 30 dB stronger than
the user. It may jam everything (barrage), only the data, only the pilots, or a few random symbols.
A conventional receiver estimates the channel from the pilots and then equalizes. That fails as
soon as the jammer is quiet during the pilots, because the receiver never sees it before the data.

MAED (mitigation, estimation and detection) avoids that blind spot by working on the whole
received block `Y` (8 x 32) at once. It alternates two steps on a data estimate `s~`:

* **Locate the jammer.** With the current `s~` it estimates the user's channel, `x = Y s~* / ||s~||^2`.
  It removes the user from the block, `E = Y - x s~^T`, which leaves jammer plus noise. One power
  iteration on `E E^H`, started from a random vector `u`, gives the jammer direction
  `j~ = E (E^H u)`.
* **Improve the data.** It projects the channel estimate away from the jammer,
  `z = x - j~ (j~^H x) / ||j~||^2`. It then takes a gradient step, `s~ <- prox(s~ + conj(E^H (tau z)))`.
  The step size `tau` is a power of two. `prox` leaves the pilots alone and clips each data
  part to +-1/sqrt(2), the square around the QPSK points.

After `TMAX` = 10 iterations, the signs of `s~` are the detected bits.

This RTL implements the published MAED architecture:

* 32 processing elements (PEs), grouped into 4 slices of 8;
* auxiliary units for the reciprocals, the random vector and the step size;
* a controller that runs one iteration in 83 clock cycles.

One block of 56 bits therefore takes 830 cycles. That is 100.5 Mb/s at the 1.49 GHz the
fabricated chip reached.

## Data layout

Every matrix-vector product runs in the PE array, and the data never moves between memories:

* Slice `i` (0..3) handles channel uses `8i .. 8i+7`.
* PE `j` of slice `i` holds antenna `j`'s row of the 8 x 8 sub-block `Y_i`, in an 8 x 16 bit
  flip-flop array.
* The same PE holds the matching row of the residual `E`, in 8 x 13 bits.
* The PE also holds one entry of `s~` (11 bits) in its s register.

Separate flip-flop arrays hold `x` (8 x 17 bits, shared by all slices) and the result `s~`
(32 x 11 bits).

| quantity | bits per part | format (integer.fraction) | origin of the width |
|---|---|---|---|
| Y | 16 | Q9.7 | published |
| s~ | 11 | Q2.9 (clip at 362) | published |
| x | 17 | Q9.8 | published |
| E | 13 | Q9.4 | published |
| PE operand A / B / adder inputs | 16 / 21 / 21 | per operation | published |
| raw jammer estimate j~ | 23 | integer | this design |
| normalized j~ | 16 | Q2.14 | this design |
| z, tau z | 21 | Q10.11 | this design |
| 1/‖s~‖², 1/‖j~‖² mantissa | 16 | Q.16, Q.15 | this design |

Only the total widths marked published appear in the publication. How each splits into integer
and fraction bits is this design's choice. The type and constant definitions are in
`maed_pkg.sv`.

## Cannon's algorithm in a ring of eight PEs

The eight PEs of a slice form a ring: PE `j` can read the s register, the B-operand register and
the running sum of PE `j+1 (mod 8)`. Two access patterns cover every product in the algorithm.

**Row-times-vector (`Y_i s~_i*`, `E_i v_i`).** At step `st = 0..7`, PE `j` multiplies its row
entry `(j + st) mod 8` by the vector entry it holds. It adds the product to its own running sum.
It then takes the vector entry of its neighbour. After eight steps PE `j` holds the dot product of
its row with the vector. The vector travels around the ring once, and every entry returns home.
Line 4a rotates `s~` through the s registers. For `E v` (line 6b), `v` is first loaded into the
B registers from the PEs' own sums (it was left there by line 6a), then rotates through `b_in`.

**Transposed (`E^H u`, `E^H (tau z)`).** Transposing `E` in storage would cost a rewrite.
Instead, each PE keeps the broadcast vector entry fixed: PE `j` always multiplies by entry `j` of
the vector. The partial sums travel around the ring. At step `st`, PE `j` reads
`conj(E[j][(j + st + 1) mod 8])`, multiplies it by its fixed vector entry, and adds the
partial sum it takes from PE `j+1`. The start offset of +1 makes each finished column sum
arrive in the PE whose index it carries. So PE `j` of slice `i` ends up holding entry `8i + j`
of `E^H` times the vector, which is the same entry of `s~` it updates in line 9.

**Rank-one update (`E = Y - x s~^T`).** This is Cannon's pattern with the s registers rotating
and `x_j` broadcast to PE `j`. The adder's second input is `Y[j][idx]` instead of the running
sum. The result is written back to `E[j][idx]`, rounded from Q.7 to Q.4 with saturation.

### The PE pipeline

Each PE does one complex multiply-accumulate per cycle, driven by a micro-operation (`uop_t`)
that the controller broadcasts to all eight PEs of a slice. The stages, counted from the issue
cycle:

1. **Issue (cycle +0).** The A operand (16 bits: a Y or E entry, the s register, or a broadcast)
   and the B operand (21 bits: `s`, a broadcast, the neighbour's B, or the PE's own sum) are
   chosen. Either can be conjugated. They are registered.
2. **Multiply (cycle +1).** The complex product is shifted right by `uop.shift`, rounding to
   nearest, and saturated to 21 bits into the product register.
3. **Adder inputs (cycle +2).** P takes the product, or `conj(sum)` for the update. Q takes zero,
   the own sum, the neighbour's sum, a Y entry, the broadcast, or `s`.
4. **Add (cycle +3).** `sum = Q +- P` is combinational. It can be written to E one cycle later.
   Alternatively, it can be clipped into the s register (line 9). Pilot PEs (slice 0, PEs 0-3)
   keep their s.

The micro-operation travels down the pipeline with the data, so back-to-back issues accumulate
correctly. An eight-step product issued in cycles `c..c+7` is complete after cycle `c+10`.

## One iteration, cycle by cycle

The controller (`maed_ctrl`) counts cycles 0..82 within an iteration and iterations 0..TMAX-1.
Issue cycles:

| cycles | work | where |
|---|---|---|
| 0 | `s_k s_k*` in all 32 PEs, summed by a 5-stage 32-input adder tree; 1/‖s~‖² from a LUT at cycle 7 | all |
| 1-8 (result 13) | `Y_i s~_i*`, Cannon, s rotating; the four slice sums combined by 4-input trees | all |
| 14 | `x = (Y s~*) / ‖s~‖²`, written to the x array at 16 | slice 0 |
| 17-24 (done 28) | `E = Y - x s~^T`, s rotating, E written back | all |
| 0 / 29-36 (done 38) | PRNG step for `u`; `v = E^H u`, transposed pattern | all |
| 39-46 (result 51) | `j~ = E v`, v rotating, slices combined | all |
| 52 | pseudonormalization of `j~` | unit |
| 53-57 | `‖j~‖^2` in slice 0 + 8-input tree; inversion at 58 | slice 0 |
| 59-63 | `j~^H (x 2^-e)` | slice 0 |
| 64-66 | `c = (j~^H x 2^-e)(2^e/‖j~‖^2)` | PE 0 of slice 0 |
| 67-70 | `z = x - j~ c`; `tau z` registered at 70 | slice 0 |
| 71-78 (done 80) | `E^H (tau z)`, transposed pattern | all |
| 79-82 | `s~ <- prox(s~ + conj(E^H tau z))`, stored in the s array at 82 | all |

The following per-phase durations are the published figures, and the schedule was built to meet
them:

* lines 4a/6b: 13 cycles;
* line 4b: 12 cycles;
* lines 6a/8a: 10 cycles each;
* each inner product: 5 cycles;
* the iteration: 83 cycles.

The placement of each operation inside those phases is this design's choice.

## Keeping a 30 dB jammer under control

The hardest part of the arithmetic is line 7a. The raw `j~` grows with the jammer power, and
can span many orders of magnitude between blocks. Line 7a only needs its direction, so two units
remove the scale before any arithmetic:

* **Pseudonormalization (`maed_pseudonorm`).** It takes the absolute value of each of the 16
  parts and finds each part's leading one. A comparator tree picks the highest position `p`, and
  every part is shifted by `p - 14`. The largest part then lies in [1, 2) in Q.14, and
  ‖j~‖² lies in [1, 64).
* **Inversion (`maed_inv_j2`).** A leading-one detector gives `e = floor(log2 ‖j~‖^2)`. The
  mantissa in [1, 2) addresses a 4096-entry table of reciprocals, giving `2^e / ‖j~‖^2`. Scaling
  the result back by `2^-e` would need a wider multiplier. Instead, the same shift is applied to
  the eight entries of `x` on their way into `j~^H x` (the "x16 shifters"). The product of the
  two inner products then has the right scale.

The widths of this path were chosen from simulation, not taken from the publication. With the
jammer 30 dB above the user, `x` is dominated by the jammer. The projection then subtracts two
nearly equal vectors. A relative error `d` in `c = j~^H x / ‖j~‖^2` leaves a jammer residue of
about `d |c| |j~|` in `z`. `E^H` amplifies that residue again, because `E` also contains the
jammer. A first version had a 12-bit `j~`, a 128-entry table and a plain `x >> e`. It detected
only 50-70 % of the bits correctly. The widths were raised until the error was small:

* `j~` to 16 bits;
* the table to 12 address bits;
* `z` to 11 fraction bits;
* the x shifters to lossless `(x << 4) >> e`.

Rounding matters as much as width. Each product shift in the PEs rounds to nearest, and so
does the Q.7 to Q.4 cut when `E` is written. Truncation biases every entry by half an LSB in
the same direction. In an `E` that the jammer dominates, that bias does not average out. At 15 dB
SNR with truncation, 17 of 672 bits were wrong (2.5 %). With rounding, 9 of 2240 are wrong
(0.4 %), against 8 for a double-precision model of the algorithm.

## Other units

* **1/‖s~‖² (`maed_inv_s2_lut`).** Pilots have unit power, and clipped data parts are at most
  1/√2. So ‖s~‖² lies in [4, 32], and a 113-entry table addressed in steps of 1/4 covers it.
* **PRNG (`maed_prng`).** xorshift64 with the shift triple 13/7/17. It advances once per
  iteration. Bits `2b` and `2b+1` give the signs of `u_b = +-1 +- j`.
* **Step size (`maed_tau_shift`).** An arithmetic right shift of `z` by `tau_shift[iter]`.
* **Adder trees (`adder_tree`).** There are three:
  * a 32-input tree for ‖s~‖² (5 pipelined levels);
  * 4-input trees with an output register, which combine the four slices' partial sums per
    antenna;
  * 8-input trees for the inner products of line 7a.

## Interface (`maed_top`)

* **Load.** While `busy` is low, write `Y` one entry per cycle: set `y_we`, with `y_row` the
  antenna (0-7), `y_col` the channel use (0-31) and `y_data` in Q9.7 per part.
* **Hold.** Keep `pilots` (4 entries, Q2.9, normally +-362 per part) and `tau_shift[TMAX]`
  (tau_t = 2^-tau_shift[t]) stable during a run.
* **Run.** Pulse `start`. `busy` rises, and `done` pulses 830 cycles later (83 x TMAX).
* **Read.** After `done`, `s_out[0..31]` holds `s~`. Entries 4..31 are the data, and their sign
  bits are the detected bits.
* **Reuse.** `Y` stays loaded between runs.

Reset is asynchronous and active low. The Y and E arrays have no reset: Y must be written before
the first run, and E is always written before it is read.

## Where this RTL departs from the published chip

* **Separate adder trees.** The chip reconfigures the PE adders into the ‖s~‖² tree and the
  slice-combining adders. Here these are separate pipelined trees fed from the PE product and
  sum registers.
* **Wider jammer path.** The jammer path is wider than the published registers suggest, as
  explained above. The published bit widths of Y, x, s, E and the PE registers are kept.
* **Normalization range.** The publication states that pseudonormalization brings ‖j~‖² into
  [1, 32). Dividing by `2^floor(log2 jmax)`, as it also describes, gives up to 64. The division
  rule is implemented.
* **Step sizes.** The tuned step sizes are not published, so `tau_shift` is an input. The test
  uses 2^-3 in every iteration.
* **I/O.** The load/readout interface is not described and is this design's own.
* **Error-rate curves not reproduced.** The full curves over SNR were not simulated. At one
  point (15 dB SNR, 30 dB jammer, 40 blocks over the four jammer types), the RTL makes 9 bit
  errors in 2240. A double-precision model of the same algorithm, with the same `u` and step
  sizes, makes 8. The two disagree on 17 bits. This is consistent with the publication's claim
  that fixed-point arithmetic costs no error-rate performance, but it is one point, not a
  curve.

## Verification

Each module has a self-checking testbench in `tb/`. Each one drives the module, compares against
values computed independently in the testbench, has a watchdog, and ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_maed_clip` | clipping of random values at +-362 |
| `tb_adder_tree` | 32- and 4-input trees: sums and pipeline latency (5 and 3 cycles) |
| `tb_maed_prng` | xorshift64 sequence, hold on `en` low, mapping to `u` |
| `tb_maed_inv_s2_lut` | table values, rounding of the address, accuracy over [4, 32] |
| `tb_maed_pseudonorm` | leading-one search, shift in both directions, saturation |
| `tb_maed_inv_j2` | exponent, reciprocal accuracy (worst 1.4e-4), exact x shifters |
| `tb_maed_tau_shift` | per-iteration arithmetic shift |
| `tb_maed_ff_array` | write, clear, hold, reset |
| `tb_maed_pe` | multiply-accumulate, E write/read-back, conjugation, update with clipping, pilot hold, rotation |
| `tb_maed_slice` | Cannon `Y s*` and the transposed `Y^H b` on a full ring |
| `tb_maed_ctrl` | 830-cycle run, each enable once per iteration at its cycle, operation counts |
| `tb_maed_top` | full detector at default parameters (see below) |

`tb_maed_top` runs the complete design with no parameter overrides. It builds ten Rayleigh-fading
blocks for each jammer type at a 30 dB jammer-to-signal ratio and 15 dB SNR, loads them, and runs
10 iterations. It checks:

* the 830-cycle latency;
* that the pilots are unchanged;
* bit errors against the sent data: at most 3 per block and under 1 % in total;
* at most 3 disagreements per block with the double-precision model;
* that clipping, pseudonormalization in both directions and the `e > 0` path of the
  inversion all occurred.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/maed_pkg.sv tb/tb_maed_top.sv \
          --top-module tb_maed_top -o sim && ./obj_dir/sim
```

The other testbenches build the same way. The top-level test finishes in seconds.
