# A compact first-level muon track trigger in SystemVerilog

A first-level muon trigger at a hadron collider has a few microseconds to decide
whether an event holds a high-momentum muon. A coarse "pre-trigger" built from
fast trigger chambers gives a rough direction for the muon, called the *seed*. The
precise drift-tube (MDT) chambers are too slow and numerous to scan blindly. But
once the seed says where to look, they can measure the track much more
precisely than the pre-trigger.

This RTL is the programmable-logic part of such a processor. It handles one
*trigger tower*: three drift-tube chambers (inner, middle, outer) that a muon
crosses one after another. For each chamber it:

1. takes the hits in a small region of interest (RoI) around the seed;
2. finds the straight track segment they form, using a one-dimensional Hough
   transform followed by a least-squares fit;
3. keeps the best segment.

From the three segment positions, the design then estimates the muon's
transverse momentum with the sagitta method.

```
 hit rows ch0 ─► hit_fifo ─► segment_finder ─┐ seg[0]
 seed ch0 ──────────────────────►┘           │
 hit rows ch1 ─► hit_fifo ─► segment_finder ─┤ seg[1]  ─► pt_calc ─► pT, charge
 seed ch1 ──────────────────────►┘           │
 hit rows ch2 ─► hit_fifo ─► segment_finder ─┘ seg[2]
 seed ch2 ──────────────────────►┘
```

The top module is `mtfp_top` (MTFP = muon track finder processor). It also
brings each chamber's segment out as a port, so that the momentum can instead
be computed in software.

## The segment-finding idea

### Why a 1D Hough transform is enough

A drift tube does not report where the muon passed. It reports only the distance
`r` from the tube's wire to the track. So the track is a line *tangent* to a
circle of radius `r` around the wire at `(z_t, y_t)`. Here `z` runs across the
tube layers and `y` along the chamber.

For a track `y = m z + b` with known slope `m`, tangency gives two possible
intercepts:

    b± = ± sqrt(1+m²)·r − (m·z_t − y_t)

The ± is the left/right ambiguity of a drift tube. The seed's slope is good
enough to use as `m`, so every hit maps to just two numbers, `b+` and `b−`.
Hits from one real track then pile up at one value of `b`, and a histogram of
`b` finds it.

Hits from other sources (noise, delta rays, the wrong side of the wire) land
elsewhere. This is the whole pattern recognition. No 2D accumulator is needed.

Each hit's position on the candidate track is then:

    y_h = y_t ± r·cos(α),   z_h = z_t ∓ r·sin(α),   m = tan(α)

The upper sign goes with `b+`. These points go to a least-squares straight-line
fit.

### Two histogram stages per multilayer

A chamber has two multilayers (ML0, ML1) of three tube layers each. Each
multilayer has its own histograms:

* **Coarse histogram (`histo_a`).**
  * 32 bins of 7.5 mm cover the whole RoI.
  * Its fullest bin is found, and every hit with an intercept within ±2 bins
    of it is kept. That is a 5-bin window, 37.5 mm wide.
* **Fine histogram (`histo_b`).**
  * 40 bins of 0.9375 mm (= 7.5 mm / 8) span exactly that window.
  * Each intercept also fills its two neighbour bins (*triple filling*). The
    peak therefore cannot split across a bin edge.
  * Up to two maxima are reported, each of at least two hits.

Every bin stores a bit mask of *which* hits it holds, not a count. The count of
a bin is the number of distinct hits in that mask. So a hit whose `b+` and `b−`
fall in the same bin counts once, and triple filling never counts a hit twice
in one bin.

**How the second maximum is chosen (this design's rule).** The second maximum
is the fullest bin whose set of (hit, sign) pairs is not contained in the first
maximum's set.

* This rules out the neighbours of the first peak that exist only because of
  triple filling.
* It still keeps a "mirror" solution that uses the same hits with the other
  signs (a left/right ghost). Such a ghost gets fitted and then loses on χ².
* Measured in simulation, a hit-level rule instead lost tracks near 30° slope.
  There, a ghost can take the first place.

### Candidates, fits and choice

A candidate pairs one maximum of ML0 with one maximum of ML1. Both are needed,
so at most 2 × 2 = 4 candidates exist. Fitter `2i+j` fits ML0 maximum `i` with
ML1 maximum `j`.

Each of the four `linear_fitter`s does an ordinary least-squares fit
`y = m z + b` over the hits of its candidate. Each hit enters at its
tangent-point position `(z_h, y_h)`, with the sign taken from the bin record. The
fitter reports

    χ² = Σ (y_h − m z_h − b)²

in LSB². Finally, `chi2_compare` keeps the candidate with the lowest χ². On a
tie, the lower index wins. There is no χ² cut.

A segment with `found = 0` means no candidate could be formed. This happens
when one multilayer has no maximum of two hits.

## Number formats

All blocks share one set of formats, defined in `rtl/mtfp_pkg.sv`:

| quantity | format |
|---|---|
| lengths (y, z, r, b) | signed, 1 LSB = 7.5 mm / 256 = 0.0293 mm, 16 bits (±960 mm) |
| drift radius | 10 bits unsigned (up to 30 mm) |
| slope m | signed Q.12, 18 bits |
| sqrt(1+m²) | unsigned Q.12, 20 bits |
| cos α, sin α | signed Q.16, 18 bits |
| segment b | 18 bits signed, same LSB as lengths |
| χ² | 32 bits unsigned, saturating |

Because of the length unit, a coarse bin is exactly 256 LSB and a fine bin
exactly 32 LSB. Both bin indices are therefore bit slices of `b − b_seed + 4096`.

The histogram range is centred on the seed intercept: 256 fine bins = 240 mm.
An intercept outside it is dropped from the histograms.

## Hit input format

Hits reach each chamber as a *packet* of 6 rows, one row per clock. A row holds
one `dt_hit_t` per tube layer:

* a valid bit;
* the tube centre `y`, `z`;
* the drift radius `r`.

So a packet holds up to 36 hits: 6 layers × 6 tubes, which is the RoI of ±3
tubes around the seed. Matching TDC times to drift radii, and choosing the RoI
tubes, happen upstream and are not part of this RTL.

Rows go into a per-chamber FIFO (`hit_fifo`):

* depth 64 rows;
* first-word fall-through, so the head row is visible on `rd_data`;
* a push into a full FIFO is dropped and sets a sticky `overflow` flag.

The seed can arrive before or after its hits. The segment finder waits until it
has both.

## Block by block

| module | what it does | timing |
|---|---|---|
| `seed_prep` | from `m`: `sqrt(1+m²)` by a bit-serial integer square root, `cos = 1/sqrt(1+m²)` by a serial divider, `sin = m·cos` | about 40 clocks, once per seed |
| `seq_div` | restoring signed division with overflow check | `Q_W−1` clocks |
| `hit_processor` | `b±` of one hit, its fine-bin indices and `dy = r cos`, `dz = r sin` | 1 clock, one per tube layer (6 instances) |
| `histo_a` | 32-bin coarse histogram with per-bin hit masks, maximum search and ±2 window selection | fills one hit per layer per clock; result 2 clocks after `find` |
| `histo_b` | 40-bin fine histogram, triple filling, two maxima | 4 clocks from `start` |
| `linear_fitter` | sums, determinant, two 18-bit serial divisions (`b`, `m`), χ² | fixed 23 clocks |
| `chi2_compare` | lowest-χ² selection among 4 fits | 1 clock |
| `segment_finder` | sequencing of all of the above for one chamber | fixed 83 clocks from seed to segment when the packet is waiting |
| `pt_calc` | sagitta and pT from three segments | fully pipelined, 7 clocks |
| `mtfp_top` | 3 × (FIFO + segment finder) + pT calculator | – |

### Latency

The segment finder takes 83 clocks from seed to result. At 240 MHz that is
346 ns, against the 300 ns (72 clocks) of the original firmware. The difference
is the division method:

* The original firmware did its divisions by ROM lookup.
* Here they are bit-serial: 18 clocks per fitter division, plus the square root
  and cosine of the seed.

A ROM with 2^21 words cannot be given as source text. Its contents are also not
published. Replacing each `seq_div` with a pipelined divider would bring the
latency down without changing anything else.

The segment finder handles one packet at a time. It is not pipelined across
packets.

### The momentum calculator

`pt_calc` uses the parametrisation

    pT = S(s) + P(φ) + E(η),   S(s) = (1/s − a0) / a1,
    P(φ) = p0 + p1 φ + p2 φ²,  E(η) = e0 + e1 η + e2 η².

Here `s` is the sagitta: how far the middle segment lies from the straight line
joining the inner and outer ones.

    s = y2 − y1 − K (y3 − y1)

* **Geometry.** `K` is the middle chamber's relative position, parameter
  `K_POS`, Q16, default 0.5. `Y0_1..3` are chamber offsets. Both are
  parameters.
* **Reciprocal.** `1/|s|` is looked up in a 1024-entry ROM,
  `recip[i] = floor(2^20 / i)`, built at elaboration.
* **Constants.** The nine constants (`a0`, `1/a1`, `p0..p2`, `e0..e2`) are held
  per region in RAM tables. They are written through the `cfg_we`/`cfg_addr`/
  `cfg_data` port with `cfg_addr = {region, k}`.
  * They depend on the detector and come from a fit to simulation. None are
    built in.
* **Charge and magnitude.** The charge is the sign of `s`, and `pT` is
  returned as a magnitude in Q16 GeV.
* **RoI inputs.** The top samples `roi_region`, `roi_phi` and `roi_eta` when
  chamber 0 accepts its seed.
* **Missing segments.** `pt_ok` is low if any chamber found no segment.

## Departures from the published design, and points of doubt

* **Sign convention of `b±`.** Two published forms of the tangency relation
  differ in sign, and one figure labels the two tangent lines the other way
  round. The RTL follows the form above, which matches the hit-position
  formulas. Only the labels "+"/"−" depend on this; the physics does not.
* **Layers per multilayer.** The number of layers per multilayer is inferred
  as 3, from the six hit processors of the firmware diagram.
* **Divisions.** Done with serial dividers instead of ROMs; see "Latency".
* **Candidate numbering.** The firmware diagram labels the first and last
  fitters "(0,0)" and "(2,2)". The RTL numbers the pairs (i,j), i,j ∈ {0,1}.
* **χ².** Unweighted; all tubes are treated as equally precise.
* **pT placement.** The momentum was computed in the ARM processor in the
  original demonstrator; a logic version was an alternative. This RTL includes
  the logic version and also exports the segments.
* **Widths and depths.** All widths and the FIFO depth are this design's choice.
* **Not included:**
  * the pre-trigger that makes the seeds;
  * the TDC-hit-to-radius matching;
  * the processor software;
  * the AXI/DMA and USB links of the demonstrator board;
  * a reseeding pass for badly seeded tracks;
  * a two-muon mode that keeps two segments per chamber.

## Verification

Each block has a self-checking testbench in `tb/`, which compares it with an
independent model:

| testbench | checks |
|---|---|
| `tb_hit_fifo` | random push/pop against a queue, including full/empty/overflow |
| `tb_hit_processor` | bit-exact comparison with a floor() model of `b±`, `dy`, `dz` |
| `tb_histo_a`, `tb_histo_b` | random hit sets against a behavioural histogram, including the duplicate rule and the second-maximum rule |
| `tb_linear_fitter` | fits against a real-number least-squares model, exact latency |
| `tb_chi2_compare` | random fits, exhaustive tie handling |
| `tb_segment_finder` | 150 random tracks with noise hits, two-track packets and seed errors up to 10 mrad |
| `tb_pt_calc` | bit-exact model of the pipeline, exact 7-clock latency |
| `tb_mtfp_top` | end to end at the default parameters |
| `tb_seed_scan` | efficiency and resolution against the seed's angular error |

More detail on the two system-level testbenches:

* **`tb_segment_finder`.**
  * Every track with a seed error ≤ 2 mrad must be found within 3 mrad and
    1 mm.
  * At least 95 % must be found overall.
  * The latency must be constant.
* **`tb_mtfp_top`.**
  * It generates tracks through three chambers with 30 mm tubes (layers at
    z = ±148, ±174, ±200 mm, odd layers staggered by half a tube).
  * It loads pT constants and checks segments and pT.
  * It counts, and requires, each mechanism at least once:
    * hits waiting in the FIFO for the seed;
    * seeds waiting for hits;
    * several candidates in one packet;
    * packets with no candidate;
    * noise hits;
    * FIFO overflow;
    * pT results.

**`tb_seed_scan`** varies the seed's angular error as a Gaussian with sigma 0,
5, 10, 15, 25, 50 and 100 mrad, with 200 tracks per point. It prints a table like
this one:

| seed error sigma [mrad] | 0 | 5 | 10 | 15 | 25 | 50 | 100 |
|---|---|---|---|---|---|---|---|
| efficiency | 1.00 | 0.995 | 0.99 | 0.98 | 0.98 | 0.85 | 0.57 |
| RMS angle residual [mrad] | 0.15 | 0.14 | 0.17 | 0.23 | 0.27 | 0.47 | 0.34 |

* The chamber model has no background hits, so the efficiency is somewhat
  higher than in a realistic environment.
* Up to 25 mrad the efficiency stays flat. Beyond that it falls, because the
  wrong slope spreads one track's intercepts over several coarse bins.
* The testbench requires at least 95 % efficiency up to 25 mrad.
* No reseeding is built. Recomputing the seed from the hit centroids of the
  two multilayers would restore efficiency at large seed errors.

All testbenches print `TB_RESULT checks=N failures=M` and have a watchdog. To
run one with plain Verilator:

    verilator --binary --timing -Irtl rtl/mtfp_pkg.sv \
        $(ls rtl/*.sv | grep -v mtfp_pkg) tb/tb_mtfp_top.sv \
        --top-module tb_mtfp_top -o sim && ./obj_dir/sim

The package must come first. The full end-to-end test takes well under a second.

## Size

Synthesised generically with Yosys, the top at its default parameters comes to
about:

* 107 k cells;
* 11.6 k flip-flop bits;
* 151 k memory bits: FIFOs, pT tables and reciprocal ROM.

Most of the logic is in the bin masks of the histograms and in the multipliers
of the four fitters per chamber.
