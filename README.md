# Multivariate EMD in hardware: a cascade of sifting blocks with three-knot splines

Empirical mode decomposition (EMD) splits a signal into intrinsic mode
functions (IMFs), from fast oscillations to slow ones, by repeatedly
removing a local mean. That mean is the average of an upper and a lower
envelope, and each envelope is a cubic spline through the extrema.
Multivariate EMD (MEMD) does the same for an N-channel signal. It cannot
find the extrema of a vector directly, so it projects the vector onto K
fixed directions in N-dimensional space and finds the maxima and minima
of each projection. Then, for every channel, it builds 2K envelopes through
that channel's values at those time instants. The local mean of a channel is
the average of its 2K envelopes. Because all channels share the same
extrema instants, an oscillation shared by several channels lands in the
same IMF in all of them ("mode alignment").

This RTL computes MEMD as a pipeline of fixed-function blocks:

* **M = 4** IMF generators in cascade. Each one extracts one IMF, and the
  residue goes on to the next.
* **S = 4** sifting blocks inside each generator. This is a fixed iteration
  count in place of a data-dependent stopping test.
* In each sifting block: **N = 4** channels, **K = 8** projection
  directions, and **2K = 16** envelopes per channel.

The envelopes are made from short splines. Each one goes through only three
consecutive extrema (a "three-knot window"). Solving for its single interior
slope takes one division, and a small reciprocal table does that division.
No global tridiagonal system is solved. This is what makes the envelopes
cheap enough to compute in streaming hardware.

All arithmetic is fixed point. The design is parameterised and synthesizable.
The defaults (N=4, K=8, S=4, M=4, frames of L=1000 vectors) are the
configuration evaluated in the published design.

## The decomposition cascade (`memd_top`)

```
 X ──► IMF gen 1 ──► C1                   IMF gen 2 ──► C2      ...     r4
  │                  │                      ▲
  └─► delay FIFO ──► (−) ──── r1 = X − C1 ──┘
```

Stage m receives the residue r_{m-1}. The first stage receives the input X.
Stage m emits its IMF C_m and forms the next residue r_m = r_{m-1} − C_m.

The subtraction needs r_{m-1} aligned with C_m. The generator's latency
depends on the data, because every change of spline window costs cycles. So
the delay is not a fixed shift register. It is a FIFO of `DLY_DEPTH = L`
vectors:

* a vector is written when it enters the generator;
* it is read when the matching IMF vector leaves.

A stage accepts input only while its delay FIFO has room. The residue
saturates to 16 bits.

The interfaces are:

* Input and residue: valid/ready streams.
* IMFs: `imf_valid[m]`/`imf[m]` with no ready of its own. An IMF vector
  leaves exactly when the residue vector built from it is taken downstream.
  The two are one event.

Adding more IMFs means increasing `M`.

## An IMF generator (`imf_generator`)

A generator is S sifting blocks in series: h_1 → h_2 → … → h_S, and
C = h_S. Every link is a valid/ready stream of N-channel vectors.

A sifting block accepts a new frame only during its load phase. A block
that is still emitting its previous frame therefore stalls the block before
it. This back-pressure is the "inter-block stall" that the testbenches count.

## A sifting block (`sift_block`)

A sifting block works on **frames of L vectors**. The reason is that the
spline for time t needs the next extremum after t, which may be arbitrarily
far ahead. A block therefore sees the whole frame before it emits anything.
One frame goes through these phases:

| phase | cycles | what happens |
|---|---|---|
| LOAD | L (one per accepted vector) | Each channel sample x_i(n) is written to its channel RAM (`dp_ram`, one per channel). The K projections y_k(n) are formed. 2K extrema detectors examine y_k(n−2), y_k(n−1), y_k(n). On a hit, the time instant n−1 goes into that envelope's time-instant FIFO, and x_i(n−1) goes into the matching value FIFO of every channel. Sample 0 is pushed into every FIFO as an end knot. |
| LEND | 1 | Sample L−1 is pushed into every FIFO as the closing end knot. |
| FILL | 3 | The first three knots of every envelope are popped into its window. |
| COEF | 3 | Reciprocal look-up of the knot spacings, then the slope solve (TDMA), then the piece coefficients. |
| RUN | L + 4 per window slide | For t = 0 … L−1, all 2K·N envelopes are evaluated in lockstep. The local means are subtracted from x(t), which is read back from the channel RAM. The result h(t) is emitted. |

The latency from the last input vector of a frame to the last output vector
is **L + 4·D + 9 cycles**. D is the number of distinct times t at which at
least one envelope slides its window. `tb_sift_block` checks this number
exactly.

Output back-pressure (`out_ready` low) freezes the whole run pipeline. The
block does this with one signal, `adv = !v2 || out_ready`.

After t = L−1 has been issued, the block returns to LOAD. A new frame can
then load while the last outputs drain.

### Directions and projection (`memd_pkg`, `signal_projection`, `csd_const_mult`)

The K direction vectors are unit vectors on the (N−1)-sphere. They are taken
from a Hammersley/Halton point set. For point index k (k = 1 … K):

```
u_j  = radical inverse of k in base p_j,  p = (2, 3, 5, 7);   b_j = 2 u_j − 1
θ_j  = atan2( sqrt(b_{j+1}² + … + b_N²), b_j ),  j = 1 … N−1
a^k  = ( cos θ1, sin θ1 cos θ2, sin θ1 sin θ2 cos θ3, sin θ1 sin θ2 sin θ3 )
```

The coefficients are rounded to 8-bit Q2.6. The package function
`hamm_q26(k, i)` holds the resulting 8×4 table, and `tb_hammersley`
recomputes it in floating point.

Because the coefficients are constants, every product a_i^k · x_i is a
**canonical signed digit (CSD)** shift-and-add (`csd_const_mult`). The digit
recoding happens at elaboration. A projection is

```
y_k = ( Σ_i a_i^k x_i ) >>> 2
```

Q12.4 × Q2.6 gives Q.10, and the shift by 2 gives Q16.8. The result is 24
bits and is combinational.

### Extrema identification (`extrema_detector`)

There is one detector per direction and polarity. The maximum detector uses
two comparators, y(n) ≥ y(n−1) and y(n) ≥ y(n+1); the minimum detector uses
≤. Their AND is SEL. SEL counts the extremum and pushes its time instant.

Non-strict comparisons are used. A flat top of two equal samples therefore
gives two neighbouring knots, which the spline handles: the spacing is ≥ 1.

Per-envelope extremum counts are available on `ext_count`. They are cleared
when a frame starts.

### Envelopes by three-knot cubic splines (`csi_unit`, `csi_tdma`, `csi_coef`, `csi_formulation`, `recip_lut`)

This is the least conventional part of the design.

Each envelope is a chain of knots (X_j, M_j):

* X_j is an extremum time instant.
* M_j is the channel's sample value at that instant.
* X_0 = 0 and the last knot is L−1, so the spline covers the whole frame.

At any time the CSI unit holds three consecutive knots (X0, M0), (X1, M1),
(X2, M2) and a cubic for each of the two intervals between them. The
spacings h0 = X1−X0 and h1 = X2−X1 and the window state come from the
controller. All channels share them, because all channels use the same
instants. Each channel only supplies its own M values.

**Slope solve (TDMA sub-block).** The spline through three knots with
natural (zero second derivative) ends has a single unknown. That unknown is
the second-derivative coefficient k at the middle knot. With slopes
s0 = (M1−M0)/h0 and s1 = (M2−M1)/h1:

```
k = 3 (s1 − s0) / (2 (h0 + h1))
```

The three divisions (by h0, by h1, by h0+h1) each use a look-up of round(2^24 / h)
in `recip_lut`. The table has 2^⌈log2 L⌉ entries, built at elaboration.

**Piece coefficients (CSI-coefficient sub-block).** Each piece is
q(dx) = a + b·dx + c·dx² + d·dx³, with dx measured from the piece's left knot.

| piece | a | b | c | d |
|---|---|---|---|---|
| 0, [X0, X1) | M0 | s0 − h0·k/3 | 0 | k/(3 h0) |
| 1, [X1, X2] | M1 | s1 − 2 h1·k/3 | k | −k/(3 h1) |

These are the standard relations d_j = (c_{j+1} − c_j)/(3h_j) and
b_j = (a_{j+1} − a_j)/h_j − h_j(2c_j + c_{j+1})/3, with c = 0 at both ends.

**Evaluation (CSI-formulation sub-block).** One envelope sample per cycle,
from the selected piece and dx, in Horner form. The result is registered one
cycle later.

**Sliding the window.** For each envelope, RUN uses piece 0 while
X0 ≤ t < X1. When t reaches X1:

* If more knots are waiting in the FIFOs, the window slides by one knot. The
  new third knot is popped, the coefficients are recomputed, and the run
  pauses for 4 cycles. Evaluation continues with piece 0 of the new window.
* If no knots are waiting, the window is the last one, and piece 1 covers
  the rest of the frame up to L−1.

All envelopes slide together at any t where at least one needs to. This
keeps the 2K·N envelope outputs aligned in time.

**Two-knot envelopes.** A projection with no extremum of one polarity has
only the two end knots. Its envelope is the straight line between them: the
"three-point" flag is off, k = 0, and piece 1 is used.

Every spline is therefore C¹ only inside one window. At a slide, the new
window's left piece starts at the same knot value but with a slope computed
from the next three knots. The envelope stays continuous at the knots, but
its slope can jump there. This is the price of never solving a global
system.

### Local mean (`local_mean`)

A channel's local-mean unit holds 2K value FIFOs and 2K CSI units. Each
cycle it forms

```
m(t) = ( Σ_{e=1..2K} V_e(t) ) / 2K      (a right shift, so 2K must be a power of two)
h(t) = x(t) − m(t)
```

h(t) is rounded from the envelope format (Q.8) to Q12.4 and saturated to 16
bits. There are N such units per sifting block, one per channel.

## Number formats

| quantity | format |
|---|---|
| samples, h, IMFs, residue | 16-bit Q12.4 (range ±2048, step 1/16) |
| direction coefficients | 8-bit Q2.6 |
| projections y_k | 24-bit Q16.8 |
| reciprocal table | 25-bit unsigned, 24 fraction bits, round(2^24/h), entry 0 = 0 |
| knot slopes s0, s1 | 28 fraction bits |
| piece coefficients a / b / c, d | 64-bit, with 24 / 40 / 48 fraction bits |
| spline intermediates | 128-bit (`xwide_t`) |
| envelopes V_e | 32-bit Q.8 |

The coefficients get more fraction bits for higher powers of dx. The reason
is that a knot spacing of several hundred samples makes d·dx³ a large
multiple of d. With fewer bits, the envelope error grows as dx³. With these
widths, envelopes agree with a floating-point spline within 0.05 (under one
Q12.4 LSB) in `tb_csi_unit`, for knot spacings up to 300.

Inputs should stay well inside ±2048. Envelopes can overshoot the data
between knots, and the residue subtraction saturates.

## Throughput and latency

One frame of 1000 vectors at the default size takes **31,693 cycles** from
its first input vector to its last residue vector (measured). Most of that
time is 16 sifting blocks, each loading the frame and then replaying it.

Frames overlap in the cascade. While block s replays frame f, block s−1 can
load frame f+1. Sustained throughput is therefore limited by the slowest
block: about 2L + 4·D cycles per frame.

The published figures are 49.1 µs per 1000 samples at 31 MHz, which is about
1,500 cycles. This design is about 20× slower than that. The published text
does not explain how each sifting iteration emits its output without first
seeing the extrema ahead of it, and this design waits for the whole frame.

Longer recordings go through as consecutive frames. For example, 10 s of
4-channel EEG at 250 samples/s is two full frames and one partial frame.
Each frame is decomposed on its own, so the spline end effects repeat at
every frame boundary.

## Where this design departs from the published description

* **Frame-based schedule.** The load / end-knot / fill / coefficient / run
  sequence, the end knots at samples 0 and L−1, and the synchronised window
  slide are this design's own. They are not a reproduction of the original
  timing, which is not described. The latency is correspondingly higher (see
  above).
* **Extrema storage.** Extremum instants are kept in one FIFO per envelope,
  shared by all channels. Each channel keeps its extremum values in per-envelope
  FIFOs, filled during load from the samples themselves. The published
  description stores values and instants in 2K dual-port RAMs per channel.
  The FIFO form holds the same data, in the order it is consumed.
* **Direction table.** The table is a set of elaboration-time constants, not
  a ROM. Its values come from the formula above. The published coefficient
  values are not given.
* **Spline coefficient d.** The published formula for d has a sum,
  (c_{j+1} + c_j)/(3h). The standard difference (c_{j+1} − c_j)/(3h) is used
  here, because only the difference gives a spline through the knots.
* **Slope solve.** The slope equation is applied with a factor of 3 (the
  figure's "<<3" notation read as ×3, built as a shift-and-add).
* **Formats.** Q12.4 samples and Q16.8 projections follow the published
  16-bit data and Q16.8 format. The wider spline formats are this design's
  choice.
* **Decomposition quality.** On the synthetic four-tone test signal, one
  1000-sample frame gives:
  * C1 ≈ the 800 kHz tone in channels 1 and 3 (correlation 0.98).
  * C2 ≈ the shared 350 kHz tone (0.83 to 0.90). The same tone also leaks
    into C3 and C4 (0.55 to 0.86).
  * The 150 kHz and 50 kHz tones are not extracted as C3 and C4. They stay
    in the residue (correlations 0.90 to 0.96 in the channels that carry
    only one of them).

  The published table shows 0.94 to 0.99 for all four IMFs. A 1000-sample
  frame at 30 MHz holds only 1.7 periods of the 50 kHz tone, which leaves
  too few extrema for a clean separation.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The reference models
are in `tb/memd_ref_pkg.sv`, written with `real` arithmetic:

* the direction table;
* the three-knot spline;
* a complete sifting iteration, including the window-slide times.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo`, `tb_dp_ram`, `tb_recip_lut` | storage against behavioural models; every reciprocal entry |
| `tb_extrema_detector` | SEL, instants and counts against direct evaluation of the comparisons, on random data with plateaus |
| `tb_hammersley`, `tb_signal_projection` | coefficients against the formula; all K projections against a multiply-and-add reference, extreme inputs included |
| `tb_csi_unit` | every envelope sample of random windows against the real-valued spline |
| `tb_local_mean` | h(t) against the mean of floating-point envelopes for random knots (K=2), within 0.1 |
| `tb_sift_block` | two frames (L=128) against the reference within 0.2, with output back-pressure and input gaps; exact latency L+4D+9 |
| `tb_imf_generator` | S=2 chain with back-pressure: h_1 against the reference sift of the input, the IMF against the reference sift of h_1 |
| `tb_memd_top` | M=2, S=2, L=96, three frames; C1 against the reference; C+r = x exactly; counts each mechanism |
| `tb_memd_full` | default size, one frame of the four-tone signal; completeness, C1+…+C4+r = x, tone correlations |

`tb_memd_top` counts each mechanism. A failure is recorded if any of them
never happens. The mechanisms are:

* window slides;
* inter-block stalls;
* two-knot (line) envelopes;
* last-window piece-1 evaluation;
* a full delay FIFO;
* residue back-pressure.

A bound probe (`tb/sift_probe.sv`) collects these counts from every sifting
block.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/memd_pkg.sv tb/memd_ref_pkg.sv tb/tb_events_pkg.sv tb/tb_memd_top.sv \
    --top-module tb_memd_top -Mdir obj -o sim
obj/sim
```

Any other testbench runs the same way; replace the last file and the top
name. The full-size run (`tb_memd_full`) takes a few minutes to build and
under a minute to simulate.

To change the design:

* `N` other than 4, or `K` above 8, needs a new direction table in
  `memd_pkg`.
* `K` must keep 2K a power of two.
* `L` sets every RAM, FIFO and reciprocal-table depth.
