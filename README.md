# Broken-Booth multiplier and a 30-tap approximate FIR filter

A multiplier dominates the power of most DSP datapaths, and many DSP workloads
can tolerate small errors in their results. The Broken-Booth multiplier uses
that tolerance. It starts from an ordinary signed radix-4 (modified Booth)
multiplier. Every partial-product bit of weight below 2^VBL is then simply not
built. VBL is the *Vertical Breaking Level*, a parameter counted in product
columns. This removes about half of the partial-product generators and adder
cells. The cost is a small error that is known in advance: with the default
(Type0) rule the result is never too large. At most it is too small by a few
units of 2^VBL.

This repository gives synthesizable SystemVerilog for the multiplier and for
the filter that the design was evaluated with: a 30-tap low-pass FIR filter
with 16-bit words, whose 30 multipliers are Broken-Booth multipliers with
VBL = 13. The design is the one described in F. Farshchi, M. S. Abrishami and
S. M. Fakhraie, "New Approximate Multiplier for Low Power Digital Signal
Processing". The RTL follows that description wherever it is specific. The
sections below say where this implementation had to choose for itself.

## Files

| file | contents |
|---|---|
| `rtl/bbm_pkg.sv` | breaking type enum, Booth digit struct, radix-4 recoder function |
| `rtl/booth_pp_gen.sv` | one partial-product row: recode, select, complement, break |
| `rtl/broken_booth_mult.sv` | WL x WL signed multiplier: WL/2 rows and their sum |
| `rtl/bbm_fir_filter.sv` | 30-tap direct-form FIR filter (top level) |
| `tb/bbm_ref_pkg.sv` | integer reference model of the multiplier, for the testbenches |
| `tb/tb_booth_pp_gen.sv` | row generator against the reference, both types |
| `tb/tb_broken_booth_mult.sv` | multiplier: random at WL=16, exhaustive at WL=8 |
| `tb/tb_bbm_fir_filter.sv` | filter end to end at its default parameters |
| `tb/tb_bbm_error_stats.sv` | exhaustive error statistics at WL=12, against the published table |
| `tb/tb_fir_snr.sv` | filter test bench with band-limited signals and output SNR |

## Booth rows and where they are broken

Radix-4 recoding reads the multiplier `y` in overlapping groups of three bits,
`{y[2j+1], y[2j], y[2j-1]}` with `y[-1] = 0`. Each group gives one digit
`d_j = -2*y[2j+1] + y[2j] + y[2j-1]`, which is one of -2, -1, 0, +1 or +2. So a
WL-bit multiplier has WL/2 rows. Row j is `d_j * x`, a (WL+1)-bit value placed
at column 2j. For WL = 12 and VBL = 7 the rows look like this, with `o` for a
bit that is built and `.` for a broken bit (replaced by zero). The break
falls between columns 7 and 6:

```
column         2         1         0
            321098765432109876543210
row 0                  oooooo.......
row 1                oooooooo.....
row 2              oooooooooo...
row 3            oooooooooooo.
row 4          ooooooooooooo
row 5        ooooooooooooo
```

Row j has `max(0, VBL - 2j)` broken bits. For WL = 12 and VBL = 11 that gives
11+9+7+5+3+1 = 36 bits that are not built, out of 6 x 13 = 78.

A negative digit needs the two's complement of `|d_j| * x`, which is an
inversion followed by +1. The +1 is a bit `S` of weight 4^j, in column 2j.
Where that increment is done decides between the two breaking rules:

* **Type0** forms each row completely, with the +1 already added, and then
  breaks it. Row j contributes `floor(d_j*x*4^j / 2^VBL) * 2^VBL`. Every row can
  only lose value, so the error (approximate minus exact) is never positive.
* **Type1** inverts a negative row but leaves its +1 aside. It breaks the
  inverted row and then adds `S` only if column 2j is at or above the VBL. The
  increments of the low rows go away together with their bits. This saves more
  hardware, but the error is larger. It too is never positive: a dropped `S`
  only removes value.

With VBL = 0 both rules give the exact product. The same description therefore
also gives the accurate Booth multiplier that the approximate one is compared
with.

In `booth_pp_gen`, each row is produced as a full-width (2*WL bit)
sign-extended number. The break is a mask, `KEEP = ~0 << VBL`. Type0 masks
`row + S`; Type1 adds `row & KEEP` and `S & KEEP`. `broken_booth_mult` adds the
WL/2 rows in a chain of plain additions and leaves the adder structure to
synthesis. Nothing is built for the masked columns: synthesis reports them as
constant outputs of the row generator, and removes the logic behind them.

The recoder output (`booth_sel_t`: `one`, `two`, `neg`) is the usual textbook
encoding. The group `111` is digit "-0". It is recoded as a plain zero, so it
does not ask for a complement. This matters only for Type1, which would
otherwise add a broken all-ones row.

### How large the error is

The error depends only on WL, VBL and the type. For WL = 12 and Type0, the RTL
was run on all 2^24 operand pairs. It gives exactly these statistics, which
also match the published ones to every printed digit:

| VBL | error mean | MSE | P(error != 0) | most negative error |
|---|---|---|---|---|
| 3 | -3.5 | 22.25 | 0.6875 | -11 |
| 6 | -61.5 | 5046.25 | 0.9375 | -171 |
| 9 | -789.5 | 751822.25 | 0.98926 | -2219 |
| 12 | -8533.5 | 8.333e7 | 0.99829 | -23211 |

Here is the reasoning for VBL = 3. Row 0 loses its three low bits. When the
digit is 0 it loses nothing; when it is ±1 it loses 3.5 on average; when it
is -2 it loses 3. Row 1 loses its bit 0, which has weight 4 and is set only
for odd digits and odd x. This gives a mean of -(2.5 + 1) = -3.5. The smallest
setting, WL = 4 with VBL = 1, has an MSE of 0.25.

The published area and power savings come from synthesis in a 90 nm library,
and simulation cannot reproduce them. That source reports 28 to 59 % less power
and 20 to 42 % less area for WL/VBL = 4/3, 8/7, 12/11 and 16/15. For the
16 x 16 multiplier with VBL = 15, it reports a critical path 6.6 % shorter.

## The filter

`bbm_fir_filter` is a direct-form FIR filter with all taps in parallel:

```
            x_in ──┬──────────┬─────────── ... ──────┐
                   │        [dly0]──[dly1]── ... ──[dly28]
                   │          │        │              │
          coef[0]─(×)  coef[1]─(×)   (×)  ...  coef[29]─(×)   Broken-Booth, VBL
                   └────────── + ───── + ─ ... ─ + ───┘       exact sum
                                                   │
                                            [y_out register]
```

| port | width | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | rising-edge clock; asynchronous active-low reset of the delay line and the output |
| `in_valid`, `x_in` | 1, WL | a sample is accepted on a rising edge with `in_valid` high |
| `coef[TAPS]` | WL each | tap coefficients, read every cycle; hold them stable |
| `out_valid`, `y_out` | 1, 2*WL+clog2(TAPS) | output, registered on the edge that accepts the sample |

Timing: `y_out` holds `sum_k coef[k]*x[n-k]` (each product approximate) right
after the edge that accepts `x[n]`, and `out_valid` is high for that cycle. The
latency is one edge, and the filter takes one sample per clock. When
`in_valid` is low the delay line holds and `out_valid` falls. The output keeps
every bit of the sum; its binary point is at the sum of the fraction bits of
sample and coefficient. With 16-bit samples and coefficients that both have 15
fraction bits, `y_out` has 7 integer bits and 30 fraction bits. Each
coefficient drives the Booth-recoded input of its multiplier. With fixed coefficients, the recoder outputs then do not
switch.

Parameters and defaults: `TAPS = 30`, `WL = 16`, `VBL = 13`,
`BBM_TYPE = BBM_TYPE0`. These are the operating point chosen in the source:
16-bit words are the shortest that keep the output SNR, and VBL = 13 is the
largest breaking level before the SNR drops sharply. `VBL = 0` gives the
accurate filter. `WL = 14, VBL = 0` is the shorter-word alternative that was
compared against it.

### Output SNR

The filter was evaluated by feeding it a desired pass-band signal `d1`, two
interferers, and white noise:

```
x[n] = d1[n] + d2[n] + d3[n] + eta[n],   y[n] = FIR(x[n])
```

`d1` lies in the pass band (0 to 0.25π). `d2` lies over the transition band
(0.35π to 0.6π) and `d3` in the stop band (0.7π to 0.95π). The output SNR is
`10*log10(var(d1) / E[(d1 - y)^2])`. `tb/tb_fir_snr.sv` rebuilds this set-up.
Each signal is a sum of 24 cosines over its band, and the noise is Gaussian at
-30 dB of the `d1` power. The interferers `d2` and `d3` are made 0.46 dB
stronger than `d1`, which brings the input SNR to the published -3.47 dB. Its
results, next to the published ones:

| case | SNR_out, this testbench | SNR_out, published |
|---|---|---|
| double precision | 23.8 dB | 25.7 dB |
| WL=16, VBL=0 | 23.8 dB | 25.35 dB |
| WL=16, VBL=13 | 23.8 dB | 25.0 dB |
| WL=14, VBL=0 | 23.8 dB | 23.1 dB |
| WL=16, VBL=16 / 19 / 22 | 23.2 / 13.6 / -4.1 dB | (SNR falls steadily with VBL) |

The input SNR is -3.47 dB in both. The filter is not the same, so the numbers
differ. The published filter is a 30-tap Parks-McClellan design whose
coefficients were not printed. The testbench uses a Hamming-windowed sinc with
its cut-off at 0.3π instead. The fixed-point scaling was not published either.
The testbench scales samples to just below full scale, which leaves so much
headroom that VBL = 13 and WL = 14 cost almost nothing here. The published
figures show a 0.35 dB loss for VBL = 13 and a 2.25 dB loss for WL = 14. The
trend is the same: larger breaking levels lower the SNR steadily. In the
published synthesis results, VBL = 13 saved 17.1 % of the filter power and
12 % of its area, for 0.35 dB of SNR.

## What is this design's own

The source describes the multiplier in full: recoding, both breaking rules, and
summation left to synthesis. It describes the filter only by its function: 30
taps, WL, VBL, Type0. These choices are this implementation's own:

* the direct-form, fully parallel structure, with one-cycle latency and one
  sample per clock. The source gives only a single clock period for the whole
  filter (4.78 ns in 90 nm), which fits a single-cycle datapath;
* the `in_valid`/`out_valid` handshake and the asynchronous reset;
* coefficients supplied on ports, because no coefficient values were published;
* coefficients on the Booth-recoded input of each multiplier;
* a full-precision output with no rounding or saturation;
* rows built as sign-extended numbers instead of a sign-extension-encoded dot
  diagram. The result is the same, and synthesis picks the structure;
* the last row's `S` bit. The dot diagram for Type1 draws no `S` for the top
  row. The RTL has one, because VBL = 0 must give the exact product;
* digit "-0" (`111`) recoded as zero.

The signal sources and the noise of the SNR set-up are not hardware. They exist
only in `tb/tb_fir_snr.sv`, as SystemVerilog `real` arithmetic.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. A watchdog ends it
with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bbm_fir_filter \
    -y rtl -y tb +libext+.sv rtl/bbm_pkg.sv tb/bbm_ref_pkg.sv tb/tb_bbm_fir_filter.sv
./obj_dir/Vtb_bbm_fir_filter
```

Use the same command for the other testbenches: swap the top module and the
last file, and pass `tb/bbm_ref_pkg.sv` wherever a testbench imports it. Each
one runs in seconds. The slowest is `tb_bbm_error_stats`, which steps through
2^24 operand pairs in about 4 s.

* `tb_booth_pp_gen`: all eight recoder inputs for 600 multiplicands. It covers
  rows 0 and 3, both types, and VBL = 7 and 0. The expected value comes from
  integer floor arithmetic (`bbm_ref_pkg`), not from bit masks.
* `tb_broken_booth_mult`: 20 000 random and corner pairs at WL = 16. It checks
  Type0 and Type1 at VBL = 13 against the model, and VBL = 0 against `x*y`. It
  also checks that neither type ever overestimates, and all 65 536 pairs at
  WL = 8, VBL = 7, for both types. The other published comparison points
  (WL/VBL = 4/3, 12/11, 16/15) are checked against the model as well.
* `tb_bbm_fir_filter`: the filter at its default parameters. It sends 3000
  random samples with random idle cycles and resets once in mid-stream. It
  checks the value and the timing of every output. It also checks that each
  mechanism happened: idle cycles, outputs changed by the breaking, a full
  delay line, and the reset.
* `tb_bbm_error_stats`: the error table above, computed on all inputs and
  checked against the published values. It also checks the WL = 10, VBL = 9
  case against its published histogram: a mean error of -1.5e-3 x 2^19 and a
  minimum of -4.2e-3 x 2^19, inside the plotted range of -4e-3 to 0.
* `tb_fir_snr`: the SNR set-up above. Every output of the accurate filter must
  equal the exact integer sum. The SNRs must keep the relations listed in the
  file header.

To try another operating point, override the parameters of `bbm_fir_filter`,
for example `#(.WL(14), .VBL(0))` or `#(.BBM_TYPE(bbm_pkg::BBM_TYPE1))`. WL
must be even and at least 4, and VBL at most 2*WL.
