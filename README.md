# A pipelined channel estimator for angle-division multiple access

A base station with a large uniform linear array (M antennas) must learn the
uplink channel of each of its K single-antenna users. With plain least squares
it needs K orthogonal training sequences of length at least K. Angle-division
multiple access (ADMA) avoids that cost. A user's channel, seen through an
M-point DFT over the antennas, has almost all of its power in a few adjacent
bins, because it arrives from a narrow range of angles. These bins are its
*spatial signature*. Users whose signatures do not overlap can share one
training sequence, so only τ sequences are needed for K users, and each user
is separated from the others in the angle domain.

This repository holds SystemVerilog RTL for such an estimator. The default
size is M = 128 antennas, K = 16 users, L = 4 training symbols and τ = 4
training sequences (groups). All of it is parameterised.

## The algorithm in two stages

**Stage 1, preamble.** The users are trained in G = K/τ rounds of τ users
each. In round r, users rτ … rτ+τ−1 send the τ orthogonal sequences. For each
of these users the design:

1. computes the LS estimate h_k = Y s_k, an M-vector;
2. rotates it by the diagonal Φ(φ) = diag(e^{jnφ}), n = 0..M−1, for three
   candidate angles φ ∈ {−π/M, 0, +π/M};
3. takes the M-point FFT of each rotated vector;
4. finds the bin with the largest |·|² in each of the three spectra;
5. keeps the candidate whose maximum is largest.

That gives the user's rotation φ_k and signature centre b_k. The rotation
moves the channel's angle between DFT grid points, so its power gathers into
fewer bins.

After the last round the **UL grouping** sorts the K signature centres in
descending order. It then deals the users out to τ groups: a user joins the
first group whose most recently added member lies at least τ + Ω bins above
it. With windows τ bins wide centred on b, this keeps the signatures within a
group at least Ω bins apart. A user that fits no group is *dropped*: it gets
no group and no estimate. The group messages (assigned, group, b, φ per user)
are the design's output to the users. Carrying them to the users is outside
this design.

**Stage 2, UL training.** All users send together. A user in group g sends
training sequence g. For every received block:

1. the same LS hardware gives y_g = Y s_g for each group;
2. every assigned user k rotates y_g by Φ(φ_k) and takes its FFT;
3. it keeps the τ bins b_k−τ/2 … b_k+τ/2−1;
4. it transforms only those bins back to M antennas (a sparse IFFT);
5. it undoes the rotation with Φ(φ_k)^H.

The result is h_k, one antenna per clock.

## Block diagram

```
 Y columns ──► data_buffer ──► τ × ls_estimator ──► stage_switch ─┬─► τ × preamble_proc ──► ul_grouping ──► group messages
 (M per clk)   (skews the L     (L systolic PEs)    (1-to-2)       │   (3 lanes: rot_gen ·                 (assigned, g, b, φ)
               columns)                                          │    fft_sdf · abs_sq ·                       │
                                                                 │    max_select; max3)                        │ b, φ
                                                                 └─► K × ul_estimator ◄────────────────────────┘
                                                                     (rot_gen · fft_sdf · extraction ·
                                                                      ifft_systolic · rot_gen^H)  ──► h_est[k]
```

`adma_top` wires these blocks together and holds a small controller. In IDLE,
`start_preamble` opens stage 1. The controller counts G rounds by the results
of preamble processor 0, starts the grouping, and enters stage 2 when the
group messages are written. `stage` shows the switch position: preamble,
off (while grouping), or UL.

## Number formats

- **Data.** Every data value, both real and imaginary part, is signed fixed
  point with 1 sign, 8 integer and 6 fraction bits (15 bits, `dat_t` in
  `adma_pkg`). This covers received samples, LS results, FFT values and
  estimates. Results are rounded to nearest (half up) and saturated.
- **Coefficients.** Rotation, twiddle and IFFT coefficients are 16-bit Q1.14.
  They all come from one table of e^{jπn/128}, n = 0..255
  (a case table in `unit_circle_rom`, read with stride 128/M). So
  M may be any power of two up to 128.
- **LS coefficients.** The LS scale 1/(L σ_p²) is not computed in hardware.
  The `pilot` port takes the training symbols already scaled (and conjugated,
  as the receiver needs). The LS partial sums are kept at full width and
  rounded once.
- **Magnitudes.** Magnitudes are compared as |x|² (one complex multiplier, no
  square root).

## The FFT and its scaling

`fft_sdf` is a radix-2 decimation-in-frequency single-path delay-feedback
pipeline.

- **Structure.** It has log2 M stages. Stage s has a feedback delay line of
  M/2^{s+1} samples (M−1 registers in all), a butterfly and, except in the
  last stage, a twiddle multiplier.
- **Order.** Samples enter in natural order, one per clock. Bins leave in
  bit-reversed order, with their natural index on `y_idx`.
- **No stage registers.** There is no register between stages. The first bin
  therefore leaves M−1 cycles after the first sample, and a frame occupies
  the unit for 2M−1 cycles. The price is one long combinational path through
  all stages. Adding one register per stage would shorten it at the cost of
  log2 M cycles of latency.
- **Scaling.** The butterflies of stages 0, 2, 4, … halve their results. The
  FFT gain is therefore 2^−S with S = ⌈log2 M / 2⌉ (2^−4 for M = 128). This
  is close to the unitary 1/√M and keeps a strong single-direction channel
  inside the 8 integer bits. The sparse IFFT applies the remaining
  2^−(log2 M − S), so FFT followed by IFFT has gain 1.
- **Frame spacing.** A stage empties its delay line on its own after the last
  frame. A new frame must therefore either follow the previous one directly
  or come at least M/2 idle cycles later. An assertion checks this.
  `data_buffer` enforces it at the input. Its `ready` is high exactly M
  cycles after the previous block started (back to back), and again from 3M/2
  cycles after it.

## Pre-treatment: data buffer and systolic LS

Y arrives one column (all M antennas) per clock, L columns per block. PE j of
an LS estimator needs column j one antenna per clock. It gets it one clock
after PE j−1 gets column j−1, so that the partial sum
h[m] = Σ_j Y[m,j] s_j can move down the chain.

`data_buffer` stores each column and reads column j out starting j cycles
after column 0. All τ LS estimators share this skewed stream, each with its
own coefficients. h[m] leaves at cycle c0 + L + 1 + m, where c0 is the cycle
column 0 was presented.

## Preamble processor

Each of the τ preamble processors has three lanes, one per candidate φ. A lane
is rot_gen → multiplier → fft_sdf → abs_sq → max_select. `max3` then picks the
best lane. Ties go to the lower φ and, within a frame, to the first bin in
output order.

b_k and φ_k are ready 2M cycles after the LS estimate's first sample. Three
lanes run in parallel, so one round takes the same time as one FFT frame.

## UL grouping

`ul_grouping` has four parts:

1. The τ results of each preamble round are written into K registers. User
   number = round·τ + processor index.
2. On `start` a pipelined Batcher merging network (`bitonic_sorter`) sorts
   the K centres, largest first, with the user number as payload. It has
   log2K(log2K+1)/2 = 10 register columns for K = 16.
3. `p2s` serialises the sorted list.
4. The list passes through the `grouping` chain of τ compare PEs.

Compare PE g remembers the b of the last user it accepted. It accepts an
incoming user if its group is still empty, or if b_in + τ + Ω ≤ b_last.
Otherwise it passes the user on to PE g+1. A user that leaves PE τ−1 is
dropped and `dropped` pulses.

`done` follows `start` after log2K(log2K+1)/2 + K + τ + 2 cycles. Ω is a
parameter (`OMEGA`, default 1).

## UL estimator

One `ul_estimator` per user works as follows.

- **Rotation and FFT.** It rotates its group's y_g by Φ(φ_k) and takes the
  FFT.
- **Extraction.** `extraction` watches the bit-reversed output and captures
  the τ bins b_k−τ/2 … b_k+τ/2−1 (mod M). When the last of them has passed,
  at output position P, it pulses `ready`.
- **Sparse IFFT.** `ifft_systolic` then starts. PE i holds bin value x_i and,
  with its F-generator (a phase accumulator stepping by bin_i), adds
  x_i e^{j2π n bin_i / M} to the partial sum for antenna n. Row n leaves the
  last PE τ+1+n cycles after `ready`.
- **De-rotation.** A second rot_gen applies e^{−jnφ_k}.

The first estimate leaves M + P + τ + 1 cycles after the first sample of y_g.
At the top that is L + M + P + τ + 2 cycles after column 0. The following
antennas come one per clock.

## Timing summary (M = 128, K = 16, L = 4, τ = 4)

| step | cycles |
|---|---|
| column 0 → LS h[0] | L + 1 |
| LS h[0] → b_k, φ_k | 2M |
| last round's result → group messages | 10 + K + τ + 2 = 32 |
| column 0 → first UL estimate h_k[0] | L + M + P + τ + 2, P ≤ M−1 |
| block spacing | M (back to back) or ≥ 3M/2 |

## Where this design departs from the published architecture

- **FFTs in the preamble.** Each preamble processor has three full FFTs, one
  per rotation candidate, as the block diagram with rotation draws it. This
  gives 3τ + K FFTs in all. The published resource discussion counts τ + K
  for this architecture. The variant without rotation, which reuses τ FFTs
  for everything, is not built.
- **Latencies.** These follow the published table for the FFT (M−1 / 2M−1),
  the sorter and extraction (P). The LS chain has one input and one output
  register more than the published L−1. The IFFT has one more than the
  published τ.
- **Window wrap-around.** The grouping compares b values directly. It ignores
  that a window near bin 0 wraps around to bin M−1, whereas extraction does
  wrap modulo M.
- **Choices not specified by the source architecture.** These are this
  design's own:
  - Ω = 1;
  - the Q1.14 coefficients;
  - the FFT scaling;
  - the frame-spacing rule;
  - the signature window centred on b (b−τ/2 … b+τ/2−1);
  - tie-breaking;
  - the controller;
  - the LS scale folded into `pilot`.
- **Not in this RTL.**
  - There is no downlink (DL) signature mapping. The uplink signatures are
    outputs, so one can be attached.
  - There is no feedback channel to the users.

## How far it is verified

Every block has a self-checking testbench in `tb/`. Each compares the block
against an independent floating-point or behavioural model (`tb_pkg.sv`) and
checks the cycle counts above. `tb_adma_top` runs the full design at its
default size:

- 4 preamble rounds, with blocks both back to back and after a gap;
- all three rotation candidates chosen;
- one user dropped by the grouping;
- UL estimates for every assigned user.

Each estimate is compared with a floating-point model of the same algorithm
and with the true channel (normalised MSE about 0.019 for the test channel).
The test channel uses user directions of ±14.48° and ±48.59° with a 2° spread.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/adma_pkg.sv tb/tb_pkg.sv \
          tb/tb_adma_top.sv --top-module tb_adma_top -o sim
./obj_dir/sim
```

Run it from the repository root. Replace `tb_adma_top` with any
`tb_<block>` to test one block. Each testbench ends by printing
`TB_RESULT checks=N failures=F`. The full-size end-to-end test takes about a
minute.

To change the size, set the parameters of `adma_top`. M must be a power of two
up to 128, K and τ powers of two with τ dividing K, and τ even. For M above
128, the coefficient table in `unit_circle_rom` must grow to 2M entries
(entry n = {round(2^14 cos(πn/M)), round(2^14 sin(πn/M))}).
