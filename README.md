# A parallel particle filter for bearing-only light-source localisation

A small ground vehicle carries eight photodiodes, each looking into one
45-degree sector around it. Each photodiode gives one bit: 1 if it sees light,
0 if it does not. A light source lights the photodiode of its own sector with
probability alpha. Reflections and stray light turn on any other photodiode
with probability alpha*beta. From a stream of these noisy bits, plus the
vehicle's own position and heading, the filter estimates where the source is.
It also tells the vehicle which sector to drive towards.

The estimator is a sampling-importance-resampling (SIR) particle filter. The
costly part of an SIR filter is resampling, because it needs the weights of all
particles. This design splits the N particles into K independent sub-filters
of M = N/K particles each. Each sub-filter samples, weights and resamples only
its own particles, so all K run in parallel. To keep the sub-filters from
drifting apart, each one hands half of its particles (M/2) to its neighbour in
a ring in every iteration. This routing happens while the particles are being
read for sampling, so it costs no extra cycles. One iteration therefore takes
about 4M cycles plus a fixed pipeline latency, whatever the value of K.

The default build follows the published design point: K = 8 sub-filters, M = 32
particles each, N = 256. Particles are 16 bits per coordinate, angles are 12
bits and particle indices are 5 bits.

## Block structure

```
pf_top
├── lfsr_prng               one 16-bit LFSR, 2K random words per clock
├── filter_bank             K sub-filters in a ring (k-1 -> k, K-1 -> 0)
│   └── sub_filter (xK)     phase controller
│       ├── sampling_routing_unit
│       │   ├── particle_memory      dual-port, M x (X,Y)
│       │   └── sampling_block       X += PRN_x*std, Y += PRN_y*std
│       ├── importance_unit
│       │   ├── cordic_atan2         bearing of particle from vehicle
│       │   ├── index_generator      sector 1..8 relative to heading
│       │   ├── weight_computation   product of 8 photodiode likelihoods
│       │   ├── weight_memory        M x 16
│       │   └── particle_population  8 sector counters
│       └── resampling_unit
│           ├── systematic_resampler
│           └── index_memory (x2)    replicated list Ind R, discarded list Ind D
├── mean_estimation         mean of all N sampled particles -> pos
└── sector_check            8 adders over K, arg-max -> ind_theta
```

`pf_pkg` holds the shared types: `particle_t` (signed X and Y), `angle_t` and
`weight_t`.

## Number formats

| quantity | format | notes |
|---|---|---|
| particle / vehicle coordinate | signed 16-bit, 8 fraction bits (Q8.8) | range ±128 units; sums saturate |
| bearing, heading | unsigned 12-bit, 4096 = one turn | differences wrap for free |
| weight, alpha, beta | unsigned Q0.16 | 1.0 is held as 0xFFFF |
| random number | 16-bit LFSR word, read as signed Q1.15 for noise, unsigned fraction for U0 | |
| particle index | log2(M) bits, 0-based | |
| sector | 3 bits, 0..7 for sectors 1..8 | sector 1 starts at the heading and runs counter-clockwise |

Only the widths (16, 12 and log2 M bits) come from the published design. How
the bits split between integer and fraction is this implementation's choice.

## One iteration

`start` begins an iteration. `z`, `phi_ugv` and `x_ugv` must stay stable until
`done`. All sub-filters start together.

1. **Sampling and routing** (M cycles plus 3 cycles of latency). Cycle i reads
   the i-th entry of the replicated list, Ind R, and uses it as the read
   address of the particle memory. The particle is sent to the next sub-filter.
   It is also offered to this sub-filter's own sampling block. For the first M/2
   cycles the sampling block takes the particle arriving from the previous
   sub-filter; for the last M/2 it takes its own. The new particle is written
   back to the particle memory and passed on to the importance unit.
2. **Importance** (pipelined behind sampling; it ends ITER + 6 cycles after
   the last particle). The unit subtracts the vehicle position, takes the
   CORDIC arctangent, subtracts the heading and finds the sector. It then
   multiplies the eight photodiode likelihoods. The weight goes into the
   weight memory at the particle's address, into the running sum, and into the
   sector counters.
3. **Resampling** (at most 3M + 3 cycles). This is systematic resampling on
   un-normalised weights. It produces the replicated list Ind R and the
   discarded list Ind D for the next iteration.

In the first iteration after reset (or any iteration started with `init`
high), the sampling unit does not use the lists. It places every particle at
the vehicle position plus one noise step, and writes them at counter
addresses.

With M = 32 and ITER = 14 one iteration takes at most about 4M + ITER + 16 =
**158 cycles** from `start` to `done` (156 measured). The published figure for N = 256, K = 8 is 178 cycles (4N/K + tau).
The mean position `pos` is ready shortly after the sampling phase.
`ind_theta` follows `done` by one cycle.

## How one particle memory serves as both buffers

A straightforward filter keeps two buffers: the sampled particles and the
resampled ones. Here the resampled set is a subset of the sampled set, with
repeats, so only index lists are kept:

* **Ind R** lists, in sorted order, the particle each new particle is drawn
  from. For example, `2,2,2,2,5,5` for six particles.
* **Ind D** lists the particles that were not replicated: `1,3,4,6` in that
  example.

The sampling unit reads particle Ind R[i], propagates it, and must write the
result somewhere. It writes the first copy of a particle back into that
particle's own location, which has already been read. It writes every further
copy into the next free discarded slot, which will never be read. So the
example writes to `2,1,3,4,5,6`.

Writing the first copy back creates a hazard: its location no longer holds the
old particle, but the next replicas still need it. Ind R is sorted, so
replicas always come directly after their original. A comparator of Ind R with
its previous value raises **Rep**. When Rep is high, the particle comes from a
register holding the last value read, not from the memory. Rep also advances
the read counter of Ind D.

The index memories use asynchronous (LUT-RAM) reads. This puts Ind D in the
same cycle as Rep. The particle and weight memories use synchronous reads, like
block RAM.

## Systematic resampling without division

With `A = Sum_w >> log2 M` and `U = (U0 * A) >> 16` (U0 is a 16-bit random
fraction):

```
s = 0; p = 0
for i in 0..M-1:
    while s < U and p < M:  s += w[p]; p += 1; if s < U: append p-1 to Ind D
    append max(p,1)-1 to Ind R;  U += A
append p..M-1 to Ind D
```

Because U is scaled by the sum, the weights need no normalisation. Each weight
fetch costs two cycles (read, then add and compare). Each replicated index
costs one cycle. Every particle is fetched at most once, so the run is bounded
by 3M cycles plus 3.

The last line of the loop is this implementation's addition. The published
loop never visits the particles after the last replicated one, so they would be
missing from Ind D. The write-back scheme above needs exactly one Ind D entry
per replica, so those particles are appended.

## Likelihood and sector index

For a particle at bearing theta from the vehicle, with heading phi, the sector
is `ceil(4/pi * (theta - phi))`. With 12-bit angles that is the top three bits
of `theta - phi - 1`. An exact difference of 0 counts as sector 8. The weight
is

```
w = prod_j  f_j,   f_j = (j == sector) ? (z_j ? alpha : 1-alpha)
                                      : (z_j ? alpha*beta : 1-alpha*beta)
```

It is computed in a three-level multiplier tree with truncation after each
product. The published design gives the per-photodiode likelihoods but not how
the eight combine. Multiplying them (that is, treating the sensors as
independent) is this implementation's choice. The prior weight 1/M is the
same for every particle, so it is dropped.

## Random numbers

A single 16-bit Fibonacci LFSR (x^16 + x^14 + x^13 + x^11 + 1, period 65535)
advances 2K positions per clock through an unrolled XOR network. Output word j
is the 16-bit window that starts j bits into the serial bit stream. Sub-filter
k uses word k as PRN_x and word k+K as PRN_y. Its PRN_x at the moment
resampling starts is its U0. The published design specifies one parallel-output
LFSR of 16 bits. The polynomial and the assignment of words to sub-filters are
this implementation's choices. Neighbouring words are shifted copies of each
other, so they are correlated. The filter tolerates this, but it is the
weakest statistical point of the design.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `K` | 8 | sub-filters (N = K·M must be a power of two) |
| `M` | 32 | particles per sub-filter (power of two) |
| `STD` | 256 (1.0 unit, Q8.8) | motion-noise scale; PRN is uniform in [-1,1) |
| `ALPHA` | 52429 (0.8) | detection probability |
| `BETA` | 39322 (0.6) | clutter probability |
| `ITER` | 14 | CORDIC stages |

The published design gives no value for the noise scale. It also does not say
whether the noise is uniform or Gaussian. Here the noise is uniform, because
the LFSR output is used directly.

## Where this RTL departs from, or adds to, the published design

* The arctangent was a vendor CORDIC core there. Here it is a self-written
  pipelined vectoring CORDIC with 3 guard bits (error within 2 LSB of 12 bits
  for vectors longer than about 4 units).
* Resampling appends the particles it never reached to the discarded list
  (see above).
* The index lists use LUT-RAM reads. The published text maps every memory to
  block RAM, but its resource table also lists LUT-RAM.
* `pos` is the plain mean of the sampled particles, as published. It is not
  weighted.
* The vehicle-side handshake (`start`, `busy`, `done`, `init`, `pos_valid`,
  `ind_valid`) is this implementation's.
* The iteration takes at most 158 cycles at the default size, against 178 published.
  The difference is pipeline latency.
* Only the 2D filter exists. The published 3D variant (16 sensors) was a
  software model.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares against values computed independently in the testbench: a serial
LFSR, real-valued `$atan2`, real-valued likelihood products, a behavioural copy
of the resampling loop, and expected routing sources. Each prints
`TB_RESULT checks=N failures=F`.

`tb_pf_top` runs the complete filter at its default size on the published 2D
scenario:

* source at (6, 22), vehicle starting at (38, -4)
* alpha 0.8, beta 0.6, 250 steps
* photodiode bits drawn at random in the testbench
* the vehicle moves 0.3 units per step towards `ind_theta`

It checks the cycle budget, that the estimate comes within 2.5 units of the
source, and the mean error over the last 50 steps. It also counts the
mechanisms and requires each at least once: the initialisation iteration,
routed particles, replicas taken from the register, discarded-list tails, and
non-zero headings. Over five seeds the filter came within 2.5 units after 181
to 211 steps, with a final mean error of 1.5 to 2.6 units.

`tb_pf_workloads` runs the same scenario on six other configurations at
once:

| K × M | N | alpha / beta | longest iteration | bound 4N/K + 50 | localised at step |
|---|---|---|---|---|---|
| 8 × 128 | 1024 | 0.8 / 0.6 | 540 | 562 | 207 |
| 4 × 64 | 256 | 0.8 / 0.6 | 284 | 306 | 220 |
| 16 × 16 | 256 | 0.8 / 0.6 | 92 | 114 | 183 |
| 1 × 32 | 32 | 0.8 / 0.6 | 156 | 178 | 166 |
| 8 × 32 | 256 | 0.8 / 0.3 | 156 | 178 | 130 |
| 8 × 32 | 256 | 0.9 / 0.1 | 156 | 178 | 128 |

The bound uses the published execution-time formula, with the 50-cycle
latency assumed for the published timing curves. With less clutter the filter
localises sooner, as expected. The vehicle needs about 137 steps to cover the
distance to the source. The published step counts depend on a vehicle speed
and a noise scale that are not given, so the counts here cannot be compared
with them directly.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/pf_pkg.sv tb/tb_pf_top.sv --top-module tb_pf_top -o sim
./obj_dir/sim
```

The same command works for any `tb_<module>`.
