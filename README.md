# Recursive and non-recursive comb decimators for a sigma-delta front end

A sigma-delta modulator delivers short words (here 5 bits) at a very high
sample rate. Before anything else can use them, the rate has to come down
and the word length up. Comb decimators do this without multipliers or
coefficient memories, because all their taps are 1. The filter is a moving
sum of R samples, applied N times, and then every R-th result is kept:

    H(z) = ( sum_{k<R} z^-k )^N

This RTL builds the same filter in two ways and puts both on one input
stream:

* **Recursive (CIC)**, R = 16, N = 5, differential delay M = 1. The moving
  sum is split into five integrators 1/(1-z^-1) running at the input rate,
  a down-sampler by 16, and five combs (1-z^-1) at the output rate. The
  integrators are pipelined, and their registers are truncated from 25 to
  16 bits along the chain.
* **Non-recursive**, R = 8 = 2^3, N = 5. Equation
  `(sum_{i<8} z^-i)^5 = (1+z^-1)^5 (1+z^-2)^5 (1+z^-4)^5` turns the moving
  sum into three stages. Each stage is `(1+z^-1)^5` followed by
  down-sampling by 2. There is no feedback loop anywhere, and every adder
  has a register behind it.

Every adder in both filters is a *modified carry look-ahead adder* (MCLA).
It is built from 4-bit groups with flat look-ahead logic, and the groups are
chained.

The design follows a published comparison of the two architectures (Teymourzadeh
and Othman, "An Improved Recursive and Non-recursive Comb filter for DSP
applications"). The structure, the filter parameters, the register widths and
the adder organisation come from that description. The interfaces, the
reset, the down-sampling phases and the way truncation drops bits are this
design's own choices. They are listed in the section "Where this RTL makes
its own choices".

## Top level

`comb_decimator_top` (no parameters):

| port        | dir | width | meaning |
|-------------|-----|-------|---------|
| `clk`       | in  | 1  | clock; one input sample per clock at most |
| `rst_n`     | in  | 1  | asynchronous reset, active low; clears every register |
| `in_valid`  | in  | 1  | `sd_in` holds a new modulator word |
| `sd_in`     | in  | 5  | modulator word, two's complement |
| `cic_out`   | out | 16 | CIC result, rate fs/16 |
| `cic_valid` | out | 1  | one-clock pulse, `cic_out` new (held until the next pulse) |
| `nrc_out`   | out | 20 | non-recursive result, rate fs/8 |
| `nrc_valid` | out | 1  | one-clock pulse while `nrc_out` is valid |

The clock may run faster than the sample rate. Every register advances only
with `in_valid` (or with a strobe derived from it), so gaps in `in_valid`
simply stall both filters. The modulator is not part of the design.

**Input range.** Keep `sd_in` within -15..+15 if the CIC output is used.
The CIC's full-precision result reaches exactly -2^24 for a constant -16.
The truncation error (see below) can then push the 16-bit output one step
past -2^15, and it wraps to a large positive number. The non-recursive
filter has no truncation and takes the full -16..+15 range.

## The recursive CIC decimator (`cic_filter`)

    a_in ─► I1 ─► I2 ─► I3 ─► I4 ─► I5 ─► ↓16 ─► C1 ─► C2 ─► C3 ─► C4 ─► C5 ─► reg ─► s_out
           25b   22b   20b   18b   16b    16b    16b  (all combs)

### Why the integrators may overflow

An integrator on its own is unstable: with a constant input it grows
without bound. The registers simply wrap modulo 2^W. This is correct and
intended: the combs after the down-sampler form differences, and
differences of wrapped values are right as long as the final result fits.
The full-precision result is bounded by (RM)^N · 2^(B_IN-1) = 2^20 · 2^4 =
2^24, so 25 bits are enough (equation B_max = N·log2(R) + B_in - 1 for the
MSB index). In the end-to-end test the integrator registers wrap about 2,000 times
in 4,096 samples, and the outputs are still exact with respect to the model.

### Truncation

Only integrator 1 is 25 bits wide. The following registers are 22, 20, 18
and 16 bits, and all five combs are 16 bits. All registers share the same
MSB weight, 2^24. Going from a wider register to a narrower one, the LSBs
are dropped: the next stage takes the top `INT_W[k]` bits of the previous
one, which is an arithmetic shift right that rounds towards minus infinity.
The comb section takes the 16 bits of integrator 5 as they are. The output
is therefore the full-precision result divided by 2^9, plus an error.

The error is not small at these widths. The LSBs dropped after integrator 1
are integrated four more times before the combs remove the growth. On random
full-range input the output is off by up to about 250 LSBs out of ±32768,
below 1 % of full scale. A constant input settles within a few tens of LSBs
of `x · 2^11`; the offset depends on the history. The mean error is zero,
because every truncation point is followed by more combs than integrators.
The widths come from the source design; to get a smaller error, widen
`INT_W` (for example `'{25,25,25,25,25}` with `COMB_W = 25` gives the exact
result).

### Pipelining

Each integrator's register sits *after* its adder, and the register output
is both the feedback and the stage output. The chain of five integrators is
therefore pipelined without a single extra register: each adder sees one
register at its input and one at its output. The combs run only once per
16 clocks and stay a combinational chain. Their delay registers and the
output register update on the down-sampler's tick.

### Timing

With samples numbered 0, 1, ... from reset, output m is

    s_out[m] = trunc( sum_k h16[k] · a_in[16m + 10 - k] ),   h16 = (sum_{k<16} z^-k)^5

The index 16m + 10 (not 16m + 15) comes from the five pipeline stages of
the integrators. `out_valid` goes high on the clock edge after the one that
takes sample 16m + 15, whatever the gaps in `in_valid`.

## The non-recursive decimator (`nrc_filter`)

    x ─► [(1+z^-1)^5, ↓2] ─► [(1+z^-1)^5, ↓2] ─► [(1+z^-1)^5, ↓2] ─► y
     5 b               10 b               15 b               20 b

Each `(1+z^-1)` block (`nrc_block`) keeps the previous sample in a register,
adds it to the present one, and registers the sum. The sum is one bit wider,
so a stage of five blocks grows the word by five bits: 15 MCLAs and a 20-bit
output in all. This output is exact: 16 · 8^5 = 2^19 fits, and nothing is
truncated.

The first stage has the narrowest words and runs on every sample. The last
has the widest words but sees only one sample in four. This is the
architecture's speed and power argument against the CIC, whose widest
register runs at the full input rate.

Down-sampling is a phase flag on the valid strobe: a stage passes the 2nd,
4th, ... result after reset. The three phases together give

    y[m] = sum_k h8[k] · x[8m + 7 - k],   h8 = (sum_{i<8} z^-i)^5

Every block adds one clock, so `out_valid` goes high 14 clock edges after
the edge that takes sample 8m + 7. Each stage computes a result for every
sample at its own input rate and then drops every other one. It is not a
polyphase form, which would skip the dropped phase; it follows the
filter-then-down-sample structure of the source.

## The adder (`mcla`, `cll`, `pfa`)

Every bit is a partial full adder (`pfa`) that produces generate g = a·b,
propagate p = a⊕b and the sum bit s = p⊕c. The bits are grouped in fours,
from the LSB. A carry look-ahead block (`cll`) per group forms all carries
of the group at once, as flat sums of products:

    c(i+1) = g(i) + p(i)g(i-1) + ... + p(i)...p(0)·c_group_in

The group carry-out is the next group's carry-in. With `W = 8` this is the
two-group adder of the source design. Other widths end in a narrower group,
for example 25 bits = 6 × 4 + 1. The source design's bit 0 has no carry-in.
Here `mcla` has a `cin` port: with `cin = 0` it is the same adder, and the
comb cells use `cin = 1` to subtract (`x + ~d + 1`).

## Where this RTL makes its own choices

* **CIC input width 5 bits.** It is derived, not stated: 25-bit first stage
  = N·log2(R) + B_in with N·log2(R) = 20. It is also the non-recursive
  filter's input width.
* **Truncation by dropping LSBs** (floor), with every register aligned on the
  same MSB. The source gives the widths but not the rounding.
* **The MCLA is used for the comb subtractors too.** The source counts five
  MCLAs in the CIC's integrators but says the MCLA does all the summation in
  both filters.
* **Pipelined CIC only.** The non-pipelined variant, with registers in the
  integrator feedback path, is not built.
* **Stage size.** Each non-recursive stage has N = 5 blocks, as the text
  says. The stage figure of the source shows three blocks.
* **Interfaces**: valid strobes, hold registers (`cic_downsampler`, the CIC
  output register), asynchronous active-low reset of every register, and the
  kept down-sampling phases (CIC: the 16th, 32nd, ... sample; each
  non-recursive stage: the 2nd, 4th, ... result).
* **Both filters in one top** on a shared input. The source designs and
  compares them separately.

What is not covered: the sigma-delta modulator itself; the SNR figures
(141.6 dB before and 145.4 dB after decimation), which would need both the
modulator and an output of about 24 bits, whereas the outputs here have 16
and 20; and the clock-rate results (220 MHz for the MCLA on an FPGA, 90 MHz
and the decline with R for the CIC), which are timing results that
simulation cannot reproduce.

## Parameters

| module | parameter | default | notes |
|--------|-----------|---------|-------|
| `cic_filter` | `N`, `R`, `M` | 5, 16, 1 | stages, decimation, differential delay |
| | `B_IN` | 5 | input width |
| | `INT_W[N]` | `'{25,22,20,18,16}` | integrator widths; must not increase; `INT_W[0]` ≥ N·log2(RM) + B_IN for exact wrap-around |
| | `COMB_W` | 16 | comb width, ≤ `INT_W[N-1]`; takes the top bits |
| `nrc_filter` | `C_IN`, `N`, `M` | 5, 5, 3 | input width, order, stages; R = 2^M; output C_IN + M·N bits |
| `mcla` | `W` | 8 | adder width |

For another decimation factor, give the CIC `INT_W[0] = 5·log2(R) + 5`, and
the non-recursive filter `M = log2(R)`. `decimation_sweep_tb` does this for
R = 64 ... 512.

## Files

`rtl/` holds one module per file, and the shared constants in `comb_pkg.sv`:
`pfa`, `cll`, `mcla`, `cic_integrator`, `cic_downsampler`, `cic_comb`,
`cic_filter`, `nrc_block`, `nrc_stage`, `nrc_filter`, `comb_decimator_top`.

`tb/` holds one self-checking testbench per module (`<module>_tb.sv`), plus
`cic_freq_response_tb.sv`, and `decimation_sweep_tb.sv` with its helper
`sweep_point.sv`. Each testbench
prints `TB_RESULT checks=N failures=F` and stops itself with a watchdog if
something hangs. The references are computed in the testbench from the input
alone: direct FIR convolutions from the closed-form transfer functions,
exhaustive truth tables for the adder cells, and, for the truncated CIC, an
integer model of the truncated recursion.

* `comb_decimator_top_tb`: both filters at full size, 4,096 samples (sine,
  noise, ±15 steps), with and without strobe gaps. It checks every output
  value and its clock, and counts stalls, integrator wrap-arounds, truncation
  events and settled steps; each must happen at least once.
* `cic_filter_tb`: the truncated filter against the integer model and within
  512 LSBs of the exact result, and an untruncated 25-bit copy against the
  exact FIR.
* `nrc_filter_tb`, `nrc_stage_tb`: against the FIR, including full-scale
  runs, with exact latency.
* `cic_freq_response_tb`: the CIC's gain at seven sine frequencies, measured
  with a single-bin DFT, against |sin(16πf)/sin(πf)|^5. The passband,
  0 to -16 dB at the output Nyquist frequency, matches within 0.5 %
  untruncated and within 3 % truncated.
* `decimation_sweep_tb`: R = 64, 128, 256, 512, both filters untruncated,
  against the FIR.

To run one with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/comb_pkg.sv \
        tb/comb_decimator_top_tb.sv --top-module comb_decimator_top_tb
    ./obj_dir/Vcomb_decimator_top_tb

The simulator has two states: every register is reset, so random start
values do not matter (`+verilator+rand+reset+2` is a good way to confirm
it). `cic_downsampler` and `cic_filter` carry assertions on their strobes,
active with `--assert`.

At the default sizes, the top synthesises (generic cells, before mapping)
to about 2,700 word-level cells and 612 flip-flops. 219 flip-flops are in
the CIC and 393 in the non-recursive filter, whose registered adder
outputs cost flip-flops in return for short paths.
