# Event centroiding for a 64 x 64 cross-strip anode

A microchannel plate (MCP) detector for ultraviolet photons turns each
detected photon into a cloud of about a million electrons. The cloud lands on a
cross-strip anode: 64 strips that measure x and 64 strips that measure y, lying
in one plane. Each strip picks up part of the charge, so one photon gives two
charge profiles, one across the x-strips and one across the y-strips. Each
profile is roughly Gaussian and spreads over a few strips. The photon position
is the centre of each profile, found to a small fraction of the strip pitch.

This RTL computes that centre in hardware. It does so for every event, in a
fixed number of clock cycles, and without iteration. The method fits a
Gaussian to the strips of one axis by turning the fit into a linear problem.
The logarithm of a Gaussian is a parabola,

    ln z(x) = a + b x + c x^2,    centre = -b / (2c),

so the fit becomes a weighted linear least-squares fit of a parabola to
ln z. The weight is z^2. Without it, noise on the small outer strips, which the
logarithm amplifies, would pull the fit off. The result is interpolated to
1/32 of a strip, so each axis has 2048 pixels. A per-axis look-up table then
removes the small periodic distortion that the method leaves between strips.

## Data flow

```
 charge_x[64] ─► axis_pipeline (x) ─► res_x  {status, raw_pos[15:0], pos[10:0]}
 charge_y[64] ─► axis_pipeline (y) ─► res_y
                 └ same module, own threshold, own correction table

 axis_pipeline:
   moment_accumulator ──► gauss_solver ──► centroid_divider ──► nonlin_corr_lut
   (uses lnz2_lut)
   8 weighted sums        det_b, det_c      {strip, 10-bit frac}   {strip, 5-bit frac}
```

The two axes run side by side in two identical pipelines and do not share
anything. The top module, `csa_centroid_top`, takes an event only when both
axes can take it, and releases a result only when both have one.

## The fit in integers

This is the part that needs the closest reading.

**Strips used.** Only strips whose charge is strictly above the axis threshold
take part. This can be any number of strips, not just the three largest. Each
strip index x is used in centred form, xc = x - 32 (range -32..31), so that the
powers xc^k stay small. The offset is added back at the end.

**Sums** (`moment_accumulator`). For every strip above threshold, with
w = z^2, the unit adds

    s_k += w * xc^k        k = 0..4
    t_k += w * ln(z) * xc^k  k = 0..2

These are the entries of the weighted normal equations

    | s0 s1 s2 |   | a |   | t0 |
    | s1 s2 s3 | * | b | = | t1 |
    | s2 s3 s4 |   | c |   | t2 |

The product w * ln(z) is not computed. It is read from `lnz2_lut`, a ROM
with 4096 entries indexed by the charge z. Entry z holds
round(z^2 * ln z), an error of at most half a count. The ROM is filled at
start-up by a loop that evaluates this formula. The base of the logarithm does not affect the centre: it scales b and
c alike.

**Solving** (`gauss_solver`). By Cramer's rule b = det_b / det(M) and
c = det_c / det(M). Only the ratio of b to c is needed, so det(M) cancels, and

    centre = -det_b / (2 * det_c)

where det_b is det(M) with its middle column replaced by t, and det_c is
det(M) with its last column replaced by t. The solver forms the five distinct
2x2 minors in one clock and the two 3x3 expansions in the next.

**Dividing** (`centroid_divider`). A restoring divider computes
|det_b| * 1024 / |2 det_c| one quotient bit per clock (16 clocks). The
quotient is rounded towards minus infinity, and 32 * 1024 is added. The result
`raw_pos` is 16 bits: a 6-bit strip index and a 10-bit fraction.

**Widths.** Nothing is truncated anywhere in this chain. With 12-bit charges
and 64 strips, the sums need at most 51 bits and are held in 56. The minors
are held in 112 bits and the determinants in 168. These widths are large. They
make the integer result equal to the exact rational solution of the
table-rounded system, so the only error is the rounding of the table. If you
narrow them, note that the largest terms are s4 (up to 2^50) and the products
s0 * t1 * s4 in the determinants (up to about 2^119).

**Rejected events.** Every event gets a 2-bit status (`fit_status_e`):

| status        | when                                                      |
|---------------|-----------------------------------------------------------|
| `ST_OK`       | position valid                                            |
| `ST_FEW`      | fewer than 3 strips above threshold (a, b, c not determined) |
| `ST_NOT_PEAK` | det_c >= 0: the parabola has no maximum                   |
| `ST_RANGE`    | the centre lies outside strips 0 .. 63.999                |

M is positive definite when at least three distinct strips are used, so
det(M) > 0 and the sign of det_c is the sign of c. A rejected event still
passes through every stage in the same time. The x and y statuses are
independent.

## Non-linearity correction

The log-parabola fit does not map positions between two strips linearly. The
error repeats from strip to strip, because the cloud is not exactly Gaussian
and only a few points carry it. Under uniform illumination this shows up as a
periodic pattern of brighter and darker pixel columns. `nonlin_corr_lut` holds
one 1024 x 5 bit table per axis. The table is addressed by the 10-bit fraction
and returns the corrected 5-bit fraction. The corrected position is
`pos = {strip, table[raw_pos[9:0]]}`.

The table contents are a calibration, so the table is a RAM. Write it through
`cfg_we`, `cfg_axis` (0 = x, 1 = y), `cfg_addr` and `cfg_data`. At start-up,
before any write, the table holds the plain mapping `f >> 5`. One way to fill it
is to record the raw fractions of a flat-field exposure and set
table[f] = floor(32 * CDF(f)), where CDF is their cumulative distribution.
This makes the 32 corrected sub-pixels equally populated.
`tb_flat_field_correction` does exactly this. With non-Gaussian (Lorentzian)
clouds the largest deviation of a sub-pixel's count from the mean drops from
about 290 % to about 12 % on x, and from about 50 % to about 14 % on y.
The raw position is output with every event so that such histograms can be
taken during operation.

## Timing

Each stage holds one event and hands it on with a valid/ready handshake. With
`out_ready` held high:

| stage              | clocks                                            |
|--------------------|---------------------------------------------------|
| moment_accumulator | 64 scan clocks + 1 table-latency clock; busy 67 per event |
| gauss_solver       | 2                                                 |
| centroid_divider   | 18                                                |
| nonlin_corr_lut    | 1                                                 |

`out_valid` rises 86 clocks after the clock edge that accepts an event. A new
event is accepted every 67 clocks, limited by the strip-serial scan. Neither
figure depends on the data. At 100 MHz this is about 1.5 million events per
second. The rate reported for an earlier firmware is 28,000 counts per second,
which this design would reach with a clock of about 1.9 MHz. The design has
not been synthesised for an FPGA, so its achievable clock is unknown. The
56 x 112-bit multipliers in `gauss_solver` and the 196-bit compare in
`centroid_divider` are the likely critical paths. They are the first place to
add pipeline registers.

## Top-level interface (`csa_centroid_top`)

| port                  | dir | width          | meaning                                 |
|-----------------------|-----|----------------|-----------------------------------------|
| clk, rst_n            | in  | 1              | clock, asynchronous active-low reset    |
| thr_x, thr_y          | in  | 12             | per-axis threshold, sampled with each event |
| cfg_we, cfg_axis      | in  | 1              | correction table write and axis select  |
| cfg_addr, cfg_data    | in  | 10, 5          | table entry and corrected fraction      |
| in_valid, in_ready    | in/out | 1           | event handshake                         |
| charge_x, charge_y    | in  | 64 x 12        | digitised strip charges of one event    |
| out_valid, out_ready  | out/in | 1           | result handshake                        |
| res_x, res_y          | out | `axis_result_t` | status (2), raw_pos (16), pos (11)     |

Types and sizes are in `csa_pkg`.

## What follows the source design and what is chosen here

Taken from the described detector electronics:
- 64 strips per axis.
- The z^2-weighted log-parabola fit over all strips above a threshold.
- The table for ln(z) * z^2.
- Two independent, simultaneous axis pipelines.
- The 10-bit raw fraction and 1/32-strip output.
- One 1024 x 5 bit correction table per axis.
- The requirement of a fixed time per event.

Chosen here, because the description is silent on them:
- The 12-bit charge width.
- Natural log with integer rounding in the table.
- The centred strip index.
- Strict "greater than" thresholding.
- Cramer's rule with the cancelled det(M), and exact full-width integer
  arithmetic.
- The restoring divider and floor rounding.
- The three rejection rules.
- The strip-serial scan.
- Valid/ready handshakes and the stage partition.
- The writable correction RAM and its start-up contents.

The reported correction curve is not reproduced. Its values are not available
as numbers, so the table is left to be calibrated.

The earlier firmware was reported to lose resolution from too few bits in its
pipeline. This design keeps every bit instead. Its positions therefore match a
double-precision software fit to within 2/1024 of a strip in the testbenches.
It is not a bit-exact model of any existing firmware.

Not part of this RTL:
- The photocathode, MCP stack and anode, which have no logic.
- The front-end readout ASIC that digitises the strip charges. The charges
  enter as one parallel word per event; a real front end would need an
  adapter.
- Anything downstream, such as image accumulation or event time tagging.

## Files and simulation

`rtl/` holds one module or package per file: `csa_pkg`, `lnz2_lut`,
`moment_accumulator`, `gauss_solver`, `centroid_divider`, `nonlin_corr_lut`,
`axis_pipeline` and `csa_centroid_top`. `tb/` holds one self-checking
testbench per module (`tb_<module>`) and `tb_flat_field_correction`. Each
testbench prints `TB_RESULT checks=N failures=M`.

The testbenches compare against references they compute themselves:
- double-precision weighted fits (Gaussian elimination with natural logs);
- 64-bit integer sums;
- exact floor division;
- copies of the loaded tables.

They also check the latencies and the 67-clock event spacing. The top-level
test runs 400 events at the default size with random output back-pressure and
two table loads. It counts each of these and fails if any never occurs:
- strips ignored below threshold;
- each rejection status;
- stalls;
- events whose axes differ in status.

Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/csa_pkg.sv \
    tb/tb_csa_centroid_top.sv --top-module tb_csa_centroid_top -Mdir obj -o sim
./obj/sim
```

Replace the testbench name to run any other test. Each runs in seconds.
