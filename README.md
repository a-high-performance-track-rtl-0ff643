# A pipelined linearized track fitter with hit transformation

Hardware track triggers must turn the hits of a charged particle into
helix parameters within a few hundred nanoseconds. A linearized fit does this
with one matrix product: every track parameter is a constant plus a weighted
sum of the hit coordinates' offsets from their means,

    p_i = sum_j A_ij (x_j - xbar_j) + pbar_i

and the fit quality is the sum of squares of further such rows (the chi
components). The weakness of the method is that real trackers are not linear
in their coordinates. Sensor modules are flat and staggered, so hits of one
layer sit at different radii. Disk modules have parallel strips that do not
all point at the beam line. The helix itself involves an arcsin. The usual
cure is to cut the detector into many small regions, each with its own
constants, and this can run to millions of constants.

This design removes the nonlinearity at the input instead. A coarse first fit
(the *pre-estimate*) gives the curvature and the polar angle of the track.
With them, every hit is moved along the track onto an ideal cylinder of fixed
radius R' for its layer. On those cylinders the coordinates depend linearly
on the track parameters, so a single set of constants serves a whole region
over the full azimuth. A tracker like the CMS Phase-2 design needs 14 regions.
Counting the sets for tracks with one missing hit, that is about 20,000
18-bit constants, and they fit in fabric registers next to the multipliers.

The RTL is a fully pipelined fitter that takes one track per clock. Its
latency is 39 cycles. Eight of these fitters sit side by side in the top
level, `track_fitter_array`.

## The three steps of a fit

A track arrives as six hit slots, ordered from the innermost to the outermost
layer. It also carries the number of its detector region. Each slot holds
R, phi and z, plus some module information (see *Hit input* below).

**1. Pre-estimate (13 cycles).** Three linear fits use one constant set per
region and hit combination:

| quantity | inputs | constants per set |
|---|---|---|
| c = q/(2 rho), the signed half-curvature | six phi | 6 A, 6 phi-bar, 1 mean = 13 |
| tan theta | six z and six R | 12 A, 6 z-bar, 6 R-bar, 1 mean = 25 |
| cot theta | six z and six R | 25 |

The pre-estimates resolve pT only to a few percent. That is enough, because
the size of the correction in step 2 scales with the curvature: a 3 %
error in c gives a 3 % error in a correction that is itself small.

**2. Transformation onto ideal cylinders (15 cycles).** For each hit, with
x = R c:

    phi' = phi + (R - R') c + x^3 / 6
    z'   = z - cot(theta) (R - R') - cot(theta) R x^2 / 6

These are the low-order expansions of the exact helix relations
phi = phi0 - arcsin(R/2rho) and z = z0 + 2 rho arcsin(R/2rho) cot(theta). They
are rewritten so that phi' and z' are exactly linear in the track parameters
at radius R'. The ideal radii R' (six per set) are constants.

Hits on parallel-strip disk modules ("2S" modules) get one more term. Such a
module measures only which strip was hit, and every hit is given the radius R
of the strip centre. The true radius is extrapolated along the track from a
reference hit whose position is fully known:

    R_ex  = R_ref + (z - z_ref) tan(theta)
    dphi  = p (h_sn - m_sn) (R_ex - R) / R^2

Here p is the strip pitch (90 um), and h_sn - m_sn is the strip number of the
hit counted from the module's centre strip. 1/R^2 comes from a 16-entry
table, one entry per ring of disk modules, shared by the whole detector. The
reference hit is the outermost valid hit that is not on a 2S module: the
outermost barrel layer or the outermost inner disk.

**3. Final fit (11 cycles).** Two 6x6 matrix products, one per plane, give:

- q/pT, phi0 and four transverse chi components from the six phi';
- z0, cot theta and four longitudinal chi components from the six z'.

Each plane needs 36 matrix entries, 6 coordinate means and 2 parameter means:
44 constants. The chi rows have zero mean by construction. Below about 10 GeV
the transformation is least accurate. So the transverse fit has two constant
sets, one for each side of 10 GeV. The *pT switch* picks one from |c| while
the hits are being transformed.

Each fitter outputs the chi components. The top level also forms the fit
quality chi^2 = sum of chi_i^2 over the eight components (`chi2_sum`). A
track-quality cut would be applied to that value. The sum is exact (38 bits)
and combinational, so it is valid in the same cycle as the fit result.

### Five-hit tracks and the constant address

A track may lack one of its six hits. Each region therefore has seven
constant sets: one for six hits, and one for each possible missing slot. In
a five-hit set, the coefficients of the missing slot are expected to be zero.
The fitter also forces the coordinates of an empty slot to zero. The set
address is

    set = region + 14 * combination,   combination = 0 (six hits) or 1 + missing slot

which gives 98 sets. A track with two or more missing hits, or with a region
number of 14 or 15, is dropped: it produces no `out_valid`.

## Pipeline and timing

```
cycle  0        13                    28             39
       | pre-estimate |  transformation   | final fit   |
hits ->| c, tan, cot  | phi'_j, z'_j       | 2 x 6 rows  |-> result
       |--- hits, set delayed 13 -->|--- set delayed 15 -->|
                      pT switch (1 reg) + 14 delay ------>|
```

- **Stage 0.** `const_addr` forms the set address combinationally. The three
  pre-estimate tables are read asynchronously with it.
- **Cycles 0-13.** The pre-estimates run. The 12-term tan/cot chains need
  exactly 13 cycles; the 6-term curvature chain is padded to 13. The hits and
  the address wait in delay lines (`pipe_delay`).
- **Cycles 13-28.** The R' table and six reads of the 1/R^2 table are
  addressed. The twelve hit transformations run. `phi_transform` has 5
  arithmetic stages and `z_transform` 6; both are padded to 15. The pT switch
  registers its decision at cycle 14, and it is delayed to cycle 28.
- **Cycles 28-39.** The transverse table is read at address `2*set + hi_pt`
  and the longitudinal table at `set`. Each of the twelve rows is a
  6-term MACC chain of 7 cycles, padded to 11.

The 13 + 15 + 11 = 39 split is the published one, and each stage is
padded to match it. The arithmetic itself would fit in fewer cycles. The
spare stages are where a synthesis tool can retime for a fast clock; the
published fitter ran at 500 MHz. No handshake or back-pressure exists: a
track is accepted every cycle in which `in_valid` is high.

### Scalar products as MACC chains

Every linear fit is a `macc_chain`, a column of multiply-accumulate stages
like cascaded DSP slices. Stage k does three things:

1. Its pre-adder forms x_k - xbar_k.
2. It multiplies that by A_k.
3. It adds the partial sum from stage k-1.

The head of the chain starts from mean << 12. The operands of term k are
delayed by k registers, so each meets its partial sum. This costs latency,
N + 1 cycles for N terms. It needs no adder tree, and every adder is local
to one stage.

## Number formats

No bit widths are published for this fitter. The formats below are this
design's own and are defined in `tf_pkg`. All values are 18-bit signed
integers, the width of a DSP multiplier port.

| quantity | unit | scale (value = code x 2^-n) | range |
|---|---|---|---|
| phi, phi', chi (transverse) | rad | n = 15 | +-4 rad |
| R, z, R', z' | cm | n = 8 | +-512 cm |
| c = q/(2 rho) | 1/cm | n = 23 | +-0.0156 /cm (pT > 0.37 GeV at 3.8 T) |
| tan theta, cot theta | - | n = 12 | +-32 |
| 1/R^2 table | 1/cm^2 | n = 28 | up to 4.9e-4 /cm^2 (R > 45 cm) |
| strip pitch | cm | n = 16 | 90 um = 590 |

Each rescaling is an arithmetic right shift, so it truncates toward minus
infinity. Each intermediate result saturates to 18 bits, as it would at the
next multiplier port. Inside the transformations:

- R c is shifted by 8 + 23 - 15 = 16 bits to land in the phi format.
- Products of two angles are shifted by 15.
- Products with tan or cot are shifted by 12.
- x/6 is formed as x * 43691 >> 18.
- (R_ex - R)/R^2 is kept with 24 fractional bits.
- The strip term is shifted by 25.

**Fit constants.** A linear fit computes `(mean << 12 + sum A (x - xbar)) >>> 12`.
So the mean and the coordinate means are given in the output and input
formats. The coefficient code is

    A_code = round(A * 2^(n_out - n_in + 12))

where n_in and n_out are the scales of the input coordinate and of the
output. For example, a curvature coefficient for a phi input has
A_code = A[cm^-1/rad] * 2^(23 - 15 + 12). Ranges that do not fit 18 bits
call for a different COEF_FRAC or pre-scaled outputs. The output units of the
final fit are whatever the constants make them. The parameter means and the
matrix rows set the scale of q/pT, phi0, z0 and cot theta.

The pT switch threshold `PT_SWITCH_C = 4782` is |c| for pT = 10 GeV in a
3.8 T field (c = 0.3 B / (2 pT) per metre). The field is an assumption taken
from the CMS magnet. Change the parameter for another field or another
format.

## Constant tables and loading

The constants live in `const_ram` instances: register arrays with a
one-constant write port and asynchronous whole-set reads, like distributed
RAM. Each fitter holds seven tables. They are written through `cfg`
(`cfg_wr_t`): `we`, `table_sel`, `set`, `idx`, `data`, one constant per
clock. The top broadcasts the bus to all fitters. Writes outside a table are
ignored. Load the tables before sending tracks: constants are not reset, and
writing a set while tracks use it gives a mix of old and new values.

| table_sel | table | sets | constants per set (idx) |
|---|---|---|---|
| 0 `TBL_PRE_C` | q/2rho pre-estimate | 98 | 0-5 A, 6-11 phi-bar, 12 mean |
| 1 `TBL_PRE_TAN` | tan theta pre-estimate | 98 | 0-5 A_z, 6-11 A_R, 12-17 z-bar, 18-23 R-bar, 24 mean |
| 2 `TBL_PRE_COT` | cot theta pre-estimate | 98 | same layout |
| 3 `TBL_RIDEAL` | ideal radii R' | 98 | 0-5 per slot |
| 4 `TBL_FIT_T` | transverse final fit | 196 = 2 x set + hi_pt | 0-35 matrix row-major (row 0 q/pT, row 1 phi0, rows 2-5 chi), 36-41 phi-bar, 42 q/pT mean, 43 phi0 mean |
| 5 `TBL_FIT_Z` | longitudinal final fit | 98 | same layout; row 0 z0, row 1 cot theta |
| 6 `TBL_INV_R2` | 1/R^2 | 16 (ring) | 0 |

A fitter holds 98 x (13 + 25 + 25 + 6 + 44) + 196 x 44 + 16 = 19,714
constants (355 kbit). The published count of 19,810 is 2830 x 7. It counts
the detector-wide 16-entry 1/R^2 table once per hit combination. Here that
table is stored once, which accounts for the difference of 96.

## Hit input

`hit_t` per slot:

| field | bits | meaning |
|---|---|---|
| `valid` | 1 | slot holds a hit |
| `two_s` | 1 | hit is on a parallel-strip disk module: apply the strip correction, do not use as reference |
| `ring` | 4 | 1/R^2 table entry of the module's ring |
| `strip_off` | 11 signed | h_sn - m_sn, strip number from the module's centre strip |
| `r`, `phi`, `z` | 18 signed each | position, formats above |

Slots must be in inner-to-outer order, because the reference hit for R_ex is
the highest slot with a valid non-2S hit. If a track has no such hit, the
strip correction is skipped. The fitter expects one hit per layer and at
most six layers per track. A seven-hit track must be cut to six upstream by
dropping its outermost hit. Masking double hits from overlapping modules is
also left to the track finder that feeds the fitter.

## Outputs

`out_valid` rises 39 cycles after an accepted track. `fit_out_t` holds:

- `q_over_pt`, `phi0` and `chi_t[4]` (transverse);
- `z0`, `cot_theta` and `chi_z[4]` (longitudinal);
- `hi_pt`, the transverse constant set used;
- `set`, the constant address.

The top level adds `out_chi2`, the sum of the squares of the eight chi
components, in the same cycle.

When `out_valid` is low, the data fields are not meaningful.

## Files

Files in `rtl/`:

| file | content |
|---|---|
| `tf_pkg.sv` | widths, formats, table layout, `hit_t`, `fit_out_t`, `cfg_wr_t`, saturation |
| `track_fitter_array.sv` | top: `N_FITTERS` = 8 fitters, shared constant bus |
| `track_fitter.sv` | one fitter: tables, pipeline, delays |
| `const_addr.sv` | region and missing hit to set address, drop decision |
| `const_ram.sv` | constant table |
| `pre_estimate.sv` | q/2rho, tan theta, cot theta |
| `macc_chain.sv` | chained multiply-accumulate scalar product |
| `ref_select.sv` | reference hit for the 2S correction |
| `phi_transform.sv` | phi' of one hit |
| `z_transform.sv` | z' of one hit |
| `pt_switch.sv` | low/high-pT set choice |
| `lin_fit.sv` | 6x6 final fit of one plane |
| `chi2_sum.sv` | sum of squared chi components |
| `pipe_delay.sv` | delay line |

The testbenches are in `tb/`. Each has the name of its module with `tb_` in
front. They share two packages:

- `tf_model_pkg.sv` is a bit-exact integer model of the arithmetic.
- `tf_fit_model_pkg.sv` is a whole-track model with random constant tables.

## Simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. To build and run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/tf_pkg.sv tb/tf_model_pkg.sv tb/tf_fit_model_pkg.sv \
        tb/tb_track_fitter_array.sv --top-module tb_track_fitter_array
    ./obj_dir/Vtb_track_fitter_array

The other modules are found through `-Irtl` and `-Itb`.

- **Unit testbenches.** Each streams random operands through its block, one
  set per cycle, and compares every output at the block's exact latency with
  the model. The model is written separately in 64-bit integers. It repeats
  the fixed-point constants as literals, so a wrong constant in `tf_pkg`
  shows up. `const_addr` is checked exhaustively.
- **Fitter testbenches.** `tb_track_fitter` drives one fitter and
  `tb_track_fitter_array` drives the top at its default size (eight
  fitters). Each loads every table with random constants through the write
  port. Each then streams random tracks and compares every output field bit
  by bit, with `out_valid` exactly 39 cycles after its track. The mix covers
  six- and five-hit tracks, dropped tracks, 2S hits, both pT sets and
  back-to-back tracks. Each testbench counts these cases and fails if one
  never occurs. The single-fitter test sends about 10,000 tracks. The array
  test checks about 9,600 fits, each with its chi^2, in roughly half a
  minute.
- **Barrel physics test.** `tb_barrel_tracks` checks that the
  transformation does its job. It models six barrel layers at 23 to 108 cm
  in a 3.8 T field, and every hit lies up to 1.5 cm off its layer's nominal
  radius. It generates exact helix tracks with 2 < pT < 100 GeV. The
  constants come from straight-line least-squares fits: on the ideal
  cylinders, phi' = phi0 - R' c and z' = z0 + R' cot(theta) exactly. The
  pre-estimates use the same fits on the raw hits.

  Results from one run:

  | quantity | result |
  |---|---|
  | q/(2 rho), raw-hit fit | 1.5 % RMS error |
  | q/(2 rho), after transformation | 0.085 % RMS error |
  | phi0 | 7e-5 rad |
  | z0 | 0.14 mm |
  | cot theta | 7e-4 |

  The four chi components are the residuals of the fit. They grow about
  2000-fold in their squared sum when one hit is displaced by 5 mrad.

Except in the barrel test, the constants are random, which tests the data
path, not the physics. The trained constants for a real detector come from a
sample of simulated or reconstructed tracks, and none are included. So the
resolutions a trained constant set would give, with 2S disk modules and the
full set of regions, have not been checked.

## How far this follows the published fitter

The published design is an FPGA implementation. Its block diagram shows the
transverse plane, and it is described in terms of its algorithm, constant
counts, stage latencies and throughput.

**Taken from the published design:**

- the three-step algorithm and its formulas;
- the constant counts per table, 14 regions, and seven hit combinations;
- two transverse sets switched at 10 GeV;
- the 16-entry 1/R^2 table and constants in fabric;
- chained MACC scalar products;
- the 13 + 15 + 11 cycle latency and one track per clock;
- eight instances.

**This design's own choices:**

- all number formats, truncation and saturation;
- the constant address encoding and the load port;
- dropping tracks with two or more missing hits;
- zeroing empty slots;
- the per-hit `two_s`, `ring` and `strip_off` fields;
- the reference-hit rule for R_ex. The published formula writes
  R_ex = (z - z0) tan theta, but z0 is not pre-estimated. The same straight
  line is drawn through the outermost fully measured hit.
- the 3.8 T field behind the pT threshold;
- building the longitudinal path in the same pipeline as the transverse
  one, with the same 15-cycle transformation budget. It is published only
  as "a similar schematic";
- a separate copy of the tables per fitter, written over a broadcast bus;
- one chi^2 over both planes, formed at the output. The published
  schematic ends at the chi components.

**Not reproduced or not checked:**

- the 500 MHz clock rate and the FPGA resource figures. This RTL uses 192
  multipliers per fitter over both planes, plus 8 for chi^2, against 166
  DSP slices published. How the original shared or split multipliers is not known.
- bit-exactness against the original emulator;
- any physics performance.
