# A stochastic Bayesian machine for binocular disparity

Given two rectified camera images, the disparity `d` of a pixel is how far its
match in the right image is shifted from it along the same row. Depth follows
from it (`Z = B·f/d`). This design does more than pick one disparity per pixel.
It computes the whole posterior distribution over the 81 candidates
`d = 0..80`, plus an explicit "no match" outcome for occluded or textureless
pixels. It follows the stochastic-computing architecture described by Coninx,
Bessière and Droulez ("Quick and energy-efficient Bayesian computing of binocular
disparity using stochastic digital signals").

The main idea: a probability is carried by a random bit stream whose fraction of
1s equals that probability. Two independent streams ANDed together give a
stream whose probability is the product. A naive Bayes posterior is a product of
likelihoods, so one chain of AND gates per candidate computes it. A set of small
counters reads the result back, and the first counter to fill names the most
probable candidate.

The RTL here is synthesizable SystemVerilog. It covers the machine itself, a
table-based front end that turns feature values into likelihoods, and the
per-pixel sequencing. The image filters that produce the features are not part
of it (see *What is outside the RTL*).

## The model the machine evaluates

Each image is filtered by three 5×5 filters. Each filter gives one feature per
pixel:

| feature | meaning | range |
|---|---|---|
| `m`  | luminance average | 0..255 |
| `gV` | vertical luminance gradient | −127..127 |
| `gH` | horizontal luminance gradient | −127..127 |

For a left pixel with features `f^l` and a candidate disparity `d`, each feature
gives a likelihood. It compares the left feature with the right feature
`d` columns to the left:

    L_f(d) = p0 + (1 − p0) · exp( −(f^l(x) − f^r(x−d))² / (2σ_f²) )

The floor `p0` keeps a mismatch from being fatal, for example one caused by a
specular reflection. The posterior under a uniform prior is
`P(d) ∝ L_m(d) · L_gV(d) · L_gH(d)`.

An extra outcome, *no match*, has probability

    P_nm = pnm0 + (1 − pnm0) · exp( −gV^l(x)² / (2σ_nm²) )

This is close to 1 where the left image has almost no vertical gradient, i.e. in
flat, textureless areas where every disparity would fit. Elsewhere it is the
small constant `pnm0`. The machine's defaults use the published parameter set:

| parameter | value | RTL parameter |
|---|---|---|
| D_max | 80 | `D_MAX` |
| p0 | 0.02 | `P0` |
| σ_m, σ_gV, σ_gH | 10 | `SIGMA_M`, `SIGMA_GV`, `SIGMA_GH` |
| pnm0 | 0.01 | `PNM0` |
| σ_nm | 8 | `SIGMA_NM` |
| counter maximum | 16 | `NMAX` (hardware limit), `n_max` (run-time value) |

## From probability to bit stream: the computational element

`op_element` is the unit everything is built from. It holds three parts:

* `p_memory`: one register holding a probability `p`. It has 16 fraction bits
  and one integer bit, so 1.0 is exact: `17'h10000` means "always 1".
* `sb_gen`: a random bitstream generator. Each clock it outputs 1 when a fresh
  16-bit random number is below `p`. The random numbers come from the generator's
  own 32-bit xorshift register. Each of the machine's generators has a different
  seed, which is a hash of its position (`sbm_pkg::gen_seed`).
* an AND gate: `b_out = b_in & generator_bit`.

If `b_in` is 1 with probability `q`, and the streams are independent, then
`b_out` is 1 with probability `q·p`. The gate is combinational. A line of three
elements therefore forms a product in the same clock, with no pipeline latency.

Statistical independence of the streams is what makes the AND a multiplication.
Shared or correlated random sources would bias every product. This is why each
element has its own generator and does not share one random source.

## The fusion matrix: 82 lines × 3 columns

`fusion_matrix` is a grid of elements, `M` lines by `N` columns. Line `j` starts
from a prior stream. At each column the stream is ANDed with that column's
likelihood stream. The output `post[j]` carries `prior_j · Π_i p_ij`.

The disparity machine uses `M = D_MAX + 2 = 82` lines and `N = 3` columns,
which is 246 elements and generators:

    prior (always 1) ─► [m: L_m(d)] ─► [gV: L_gV(d)] ─► [gH: L_gH(d)] ─► counter d     d = 0..80
    prior (always 1) ─► [m: 1.0   ] ─► [gV: P_nm   ] ─► [gH: 1.0   ] ─► counter nomatch

Notes on this structure:

* The prior is uniform, so every line starts with a stream that is always 1. A
  different prior would enter here.
* The no-match line also has three elements, but two of them hold 1.0. Its
  product is just `P_nm`. Keeping the line the same shape as the others makes
  all 82 lines alike and matches the generator count of the original design.
* Memories are loaded one whole line (three values) per clock, through
  `wrow`/`wdata`. An assertion forbids loading while the generators run.

## Reading the answer: the counter race

This is the part that needs the most care to understand.

`overflow_counter_bank` has one counter per line. Every clock of a run, each
counter adds its line's output bit. The run ends in the first clock in which some
counter reaches `n_max`. All counters then freeze. Three things can be read
from the frozen state:

1. **MAP estimate.** The counter that filled first belongs, with high
   probability, to the line with the largest stream probability. The machine
   reports its index as `map_idx`. An index of `D_MAX+1` means *no match*, and
   the `no_match` output is then high.
2. **Normalised distribution.** `counts[j] / n_max` estimates
   `P(j) / max_k P(k)`. This is the posterior scaled so that its largest entry is
   1, with a precision of about `1/n_max`. Normalising to the maximum suits a
   stream representation: the largest value can always be represented without
   knowing the normalisation constant in advance.
3. **Run time.** `cycles` is the number of clocks the run took. Its expectation
   is about `n_max / p_max`, where `p_max` is the winning line's stream
   probability.

Stopping on a fixed count of 1s, and not after a fixed number of clocks, makes
the precision of the answer independent of how small the probabilities happen
to be. The run time then adapts to the data instead.

### Why the no-match line

Without the no-match line the race has two failure modes:

* **Occlusion.** No disparity matches, so every line's probability is about
  `p0³ ≈ 8·10⁻⁶`. Filling a 16-count counter would take millions of clocks. The
  no-match line runs at `pnm0 = 0.01`, so it wins after about 1,600 clocks and
  reports the pixel as unmatched.
* **No texture.** Every disparity matches, so the race would pick one of them
  at random. With `gV^l ≈ 0`, `P_nm ≈ 1`, so the no-match line fills at the
  same speed as the false matches. In the extreme case all 82 lines are
  always 1.

### Ties

With exact fixed-point values several counters can fill in the same clock. For
example, equal features give likelihood exactly 1.0. This design resolves a tie
as follows:

* If the no-match line is among the counters that filled, it wins.
* Otherwise the lowest disparity wins.

A tie means the data do not single out one disparity, which is what "no match"
stands for. The original description does not say how ties are broken.

### Choosing `n_max`

`n_max` trades speed for accuracy, and is an input, not a constant. The
published evaluation measured, on real stereo video:

| counter maximum | mean clocks per pixel |
|---|---|
| 1 | 2.21 |
| 16 | 27.97 |

It also found that distribution error and no-match detection improve steadily
with larger maxima. The hardware limit is the parameter `NMAX`, which sets the
counter width to `$clog2(NMAX+1)` bits. The published sweep went up to 32, which
needs `NMAX = 32` (see `tb_counter_sweep`).

## Likelihood units

`likelihood_unit` turns a pair of feature values into the likelihood above. The
result depends only on `|fl − fr|`, so the unit is a 256-entry table indexed by
that difference, clamped at 255. The table is computed from the formula with
`$exp` when the design is elaborated, so it follows the `P0` and `SIGMA`
parameters. Its entries are the formula's values rounded to 16 fraction bits.

The differences from the formula are small:

* Rounding error is at most ½ LSB, or 7.6·10⁻⁶.
* Beyond a difference of about 50 every entry equals the floor `p0`.

The top uses four instances: one per feature, and one for `P_nm`, with `fr = 0`,
`P0 = pnm0` and `SIGMA = σ_nm`. The original system computed this step in
floating point on a processor. Doing it in a table is this design's choice.

## Running a pixel (`disparity_machine`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `wr_en`, `wr_row` | in | 1, 7 | load line `wr_row`: `0..80` is disparity `d`, `81` is no-match |
| `wr_fl`, `wr_fr` | in | `feat3_t` (3 × 9-bit signed) | left features at (x, y); right features at (x − d, y) |
| `start` | in | 1 | begin the run (taken when not busy) |
| `n_max` | in | 5 | counter maximum, 1..16, stable during the run |
| `busy`, `done` | out | 1 | run in progress / result valid |
| `map_idx`, `no_match` | out | 7, 1 | winner line; winner is the no-match line |
| `counts` | out | 82 × 5 | frozen counter values |
| `cycles` | out | 32 | run clocks of the last pixel |
| `post` | out | 82 | the posterior bit streams, for further stochastic processing |

Each pixel runs in three steps:

1. **Load.** For 82 clocks, while not busy, drive one line per clock.
   * Line `d` takes the left features and the right features at `x − d`.
   * Line 81 only uses `wr_fl.gV`.
   * The memories keep their contents, so the same pixel can be rerun without
     reloading. This gives fresh random streams, for example at a different
     `n_max`.
2. **Start.** Pulse `start` for one clock. The sequencer (`disparity_ctrl`) then
   goes through these states:
   * one `CLEAR` clock to zero the counters;
   * `RUN` until a counter fills;
   * `DONE`.
3. **Result.** `done` goes high `cycles + 2` clocks after the clock edge that
   sampled `start`. `map_idx`, `no_match`, `counts` and `cycles` hold until the
   next `start`.

A line whose three likelihoods are all 1.0 fills in exactly `n_max` clocks.
The tests use this to check the latency.

Per-pixel cost is 82 load clocks, 2 control clocks and the stochastic run. The
published throughput figure (about 67.5 frames/s at 500 MHz for 640×480) counts
only the run. With loading included, this implementation needs about 112 clocks
per pixel, or about 17 frames/s at the same clock. No timing analysis has been
done, so the reachable clock rate of this RTL is unknown.

Pixels whose column `x < D_MAX` do not have all candidates in the right image.
The host should not submit them, as in the original model.

## Files

Each RTL file begins with a comment on its function and timing.

| file | content |
|---|---|
| `rtl/sbm_pkg.sv` | probability and feature types, column order, sequencer states, seed hash |
| `rtl/sb_gen.sv` | random bitstream generator |
| `rtl/p_memory.sv` | probability register of an element |
| `rtl/op_element.sv` | memory + generator + AND |
| `rtl/fusion_matrix.sv` | M × N grid of elements |
| `rtl/overflow_counter_bank.sv` | counters, overflow detection, MAP index, tie rule |
| `rtl/likelihood_unit.sv` | likelihood table |
| `rtl/disparity_ctrl.sv` | per-pixel sequencer and run-clock counter |
| `rtl/disparity_machine.sv` | top level |

At the default size the top synthesises to about 12.5 k flip-flops. Most of
them are the 246 × (32 + 17) bits of generator state and memories. The rest is
four 256 × 17-bit likelihood tables and about 3.5 k word-level cells.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=F`. The tests compare against models written
independently in the testbench.

| testbench | what it checks |
|---|---|
| `tb_sb_gen` | every output bit against a reference xorshift model (with pauses); p = 0, 1.0 and 1s-rates for 0.02, 0.5, 0.8 |
| `tb_p_memory` | reset value, write, hold |
| `tb_op_element` | every output bit = input AND reference generator; product rates |
| `tb_fusion_matrix` | line with 1.0 passes its prior bit for bit; line with a 0 never fires; product rates 0.125 and 0.432; rewriting one line leaves the others |
| `tb_overflow_counter_bank` | counts, overflow and winner each clock against a reference, n_max 1..16, ties with and without the last line |
| `tb_likelihood_unit` | table against the formula within 1 LSB over the full input ranges, both parameter sets |
| `tb_disparity_ctrl` | one clear clock, exact run length, `cycles`, start-to-done latency, start ignored while busy |
| `tb_disparity_machine` | default size, see below |
| `tb_stereo_row` | default size, see below |
| `tb_counter_sweep` | `NMAX = 32`, see below |

**`tb_disparity_machine`** runs the full-size machine through these cases:

* exact matches at d = 0, 37, 80 and a random d, with n_max 16 and 1, each
  finishing in exactly n_max clocks;
* occluded pixels, which must end as no match after a plausible number of
  clocks;
* flat areas, where all 82 lines tie and no-match wins in n_max clocks;
* a pixel with two fractional candidates, run 300 times and compared with
  floating-point values from the model.

Measured on that last case:

| quantity | floating-point expectation | measured |
|---|---|---|
| mean `counts[20] / n_max` | 0.559 | 0.551 |
| mean run length | 26.0 clocks | 25.6 clocks |
| winner = expected line | — | 99 % of runs |

The testbench also counts each mechanism: match, occlusion, flat area, tie,
change of n_max, reload, and restart from `DONE`. It fails if one never happens.

**`tb_stereo_row`** synthesises one 640-pixel-wide stereo strip: a textured
background at d = 12, a foreground object at d = 45, and sensor noise. It
filters the strip with its own 5×5 kernels. It then runs all 556 computable
pixels of the feature row through the full-size machine and compares each
decision with the floating-point model. Typical results:

| quantity | n_max = 16 | n_max = 1 |
|---|---|---|
| agreement with the floating-point MAP decision | about 95 % | about 60 % |
| true disparity found on visible pixels | about 90 % | about 55 % |
| mean run clocks per pixel | about 22 | about 1.1 |

With these random textures many occluded pixels still find a chance match, in
the floating-point model too. The testbench therefore only prints the no-match
rate on occluded pixels and does not check it.

**`tb_counter_sweep`** builds the machine with `NMAX = 32` and runs one pixel
120 times at every counter maximum from 1 to 32. At each maximum it checks three
things:

* The mean run length grows linearly, as `n_max / p_max` (26.5 measured against
  26.0 expected at 16, and 52.3 against 52.1 at 32).
* The stronger candidate wins about as often as an exact calculation of the race
  predicts (from 81 % at n_max = 1 to 100 % at 32).
* From n_max = 8 on, the runner-up's normalised count stays within 0.1 of the
  true probability ratio.

To simulate with Verilator (5.x), for example the end-to-end test:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_disparity_machine \
        -y rtl -y tb +libext+.sv rtl/sbm_pkg.sv tb/tb_disparity_machine.sv
    ./obj_dir/Vtb_disparity_machine

Replace the top module and file to run another testbench. The package must come
first on the command line. Every run takes seconds.

## Where this RTL departs from, or adds to, the original description

Taken from the original:

* the bitstream representation and AND-gate product;
* the element structure: memory, generator, AND;
* the M × N grid with a prior bus in and a posterior bus out;
* 81 disparity lines plus a no-match line, in the column order m, gV, gH;
* the two "1" elements of the no-match line (246 generators in all);
* the uniform always-on prior;
* the likelihood and no-match formulas and all parameter values;
* counters that stop at the first overflow and give the MAP index and the
  max-normalised distribution.

Choices made here, where the original gives no detail:

* **Random source.** Each generator uses a 32-bit xorshift register. The
  original evaluation simulated Mersenne-twister generators in software. It
  proposed superparamagnetic tunnel junctions, analog spintronic devices, as
  the physical source. The xorshift register is a small digital stand-in. Its
  streams from different seeds are shifted copies of one 2³²−1 sequence, which
  the seed hash places far apart.
* **Fixed point.** Probabilities use 16 fraction bits. Likelihoods come from
  elaboration-time tables and are not computed in floating point.
* **Loading.** Lines load one per clock through the likelihood units. The
  original throughput estimate ignores loading time.
* **Run-time counter maximum.** `n_max` is an input, with a hardware limit of
  `NMAX`.
* **Tie rule.** As described above.
* **Sequencer.** One clear clock, no time-out, and a 32-bit run-clock counter.
* **Reset.** Memories reset to 0 and generators reset to their seeds.
* **Counter size.** The original text speaks both of "16-bit counters" and of
  "counters with a maximum value of 16". Its numbers (for example "8-bit
  counter" with one million cycles at a rate of 1/125,000) only fit the second
  reading, which is the one used here.

## What is outside the RTL

* **The three 5×5 feature filters.** Only their kinds and size are specified.
  Their coefficients are not, and filtering was treated as preprocessing on any
  suitable hardware. Features enter the top as ports.
  `tb_stereo_row` uses its own kernels only to make test data.
* **The random devices** proposed for a physical machine. They are analog, so
  `sb_gen` stands in for them.
* **Camera, rectification and colour-to-luminance conversion.**
* **Parallel instances for several pixels at once.** The architecture allows
  this, but it was not part of the evaluated configuration.
