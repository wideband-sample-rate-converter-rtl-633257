# Parallel-serial decimating sample rate converter

A 20 GSPS digitiser delivers 80 samples per clock at 250 MHz. Decimating such
a stream is hard for the usual CIC + halfband chain: a CIC integrator is a
one-clock recursive adder, so a serial CIC can take only one sample per clock,
and a halfband filter written as a plain parallel FIR needs a multiplier per tap
per lane. This design splits the converter in two:

* a **parallel half** that takes all 80 lanes and reduces them, with a fixed
  decimation of 80, to one sample per clock (250 MSPS), and
* a **serial half** that works on that single stream and gives the flexible
  ratio: a CIC programmable from 1 to 4000 followed by up to three halfband
  stages.

The total decimation is `80 * rate * 2^hb_used`, from 80 to 2,560,000, i.e. an
output rate from 250 MSPS down to 7.8125 kSPS.

The architecture follows R. Ming et al., "Wideband Sample Rate Converter Using
Cascaded Parallel-serial Structure for Synthetic Instrumentation". The RTL here
is an independent implementation; where that paper leaves something open, the
choice made is stated below and in the header comment of each file.

```
            parallel half (par_src)                          serial half (ser_src)
 x[0..79] ┌─────────────────────┐ 4 lanes ┌─────┐ 2 ┌─────┐ 1  ┌─────────┐  ┌────┐  ┌────┐  ┌────┐
 ────────►│ par_cic  R=20, N=5  ├────────►│ HB1 ├──►│ HB2 ├───►│ ser_cic ├─►│HB a├─►│HB b├─►│HB c├─► y
 80 x 16b │ 5 x par_integrator  │         │     │   │     │ y' │ R=1..4000│  └────┘  └────┘  └────┘
 per clk  │ par_downsampler     │         └─────┘   └─────┘ (mid)└─────────┘   0..3 of them used
          │ 5 x par_comb        │        par_halfband x 2                    ser_halfband x 3
          └─────────────────────┘
```

## Sample order and the lane picture

Everything in the parallel half uses one convention: serial sample `n` sits in
lane `n mod L` of clock `n / L`, lane 0 being the oldest. Every parallel block
keeps this order on its output, so the output of each parallel block is again
an ordinary stream read lane 0 first, and each block can be checked against a
serial model of the same filter run on the interleaved stream. The testbenches
do exactly that.

## Parallel integrator: the recursive loop moved to one accumulator

The serial integrator `y(n) = y(n-1) + x(n)` cannot be unrolled naively: lane
`l` of clock `t` needs the sum of every earlier sample. Split that sum in two:

```
y(t,l) = A(t-1) + I(t,l)
I(t,l) = x(t,0) + x(t,1) + ... + x(t,l)     lane integral inside one clock
A(t)   = A(t-1) + I(t,L-1)                  running total of whole clocks
```

`I(t,·)` is a prefix sum over the lanes of one clock and has no feedback at
all. Only `A` is recursive, and it is a single adder however many lanes there
are. `par_integrator` is built from these three parts:

* **adder matrix** (`adder_matrix`), the prefix sum. It is built by recursive
  halving: the prefix sum of a block of 2m lanes is the prefix sum of each
  half, with the last value of the lower half added to every lane of the upper
  half. Unrolled, row `r` adds the last lane of the lower half of each
  `2^(r+1)`-lane block to all lanes of the upper half. Eight lanes take three
  rows:

  ```
  row 1:  lane 1 += lane 0,  lane 3 += lane 2,  lane 5 += lane 4,  lane 7 += lane 6
  row 2:  lanes 2,3 += lane 1,              lanes 6,7 += lane 5
  row 3:  lanes 4,5,6,7 += lane 3
  ```

  For 80 lanes the matrix is built for 128 lanes (7 rows) with lanes 80..127
  tied to zero and dropped: a lane's prefix sum never depends on higher lanes.
  It is `ceil(log2 L)` adders deep and has no multipliers.
* **serial integrator**: the accumulator `A`, which adds `I(t,L-1)` once per
  clock.
* **adder line**: `L` adders forming `A(t-1) + I(t,l)`.

There are two register levels: after the adder matrix, then after the adder
line and accumulator. Latency is 2 clocks per integrator stage. All arithmetic
wraps modulo `2^W`, as it does in any CIC integrator; the combs remove the
wrap.

## Parallel downsampler and comb

With `L = 80` and `R = 20`, each clock holds exactly four samples to keep. The
downsampler keeps lanes 0, 20, 40 and 60 (the samples with `n mod 20 = 0`) and
emits them as a 4-lane stream (1 register). It requires `L` to be a multiple of
`R`, and checks this at elaboration.

The comb with differential delay `M` on a lane stream is
`y(t,l) = x(t,l) - x(t,l-M)`, where lanes `l < M` reach back into earlier
clocks; the last `M` samples are kept in registers. The design uses `M = 1`:
lane 0 subtracts the last lane of the previous clock, which is the only value
that is stored. All four subtractions happen in the same clock. `par_comb` and
`par_cic` take `M` as a parameter; the CIC growth and output shift then use
`R*M` in place of `R`.

`par_cic` chains 5 integrators, the downsampler and 5 combs at the Hogenauer
full-precision width `16 + ceil(5*log2 20) = 38` bits. It then shifts right by
22 with rounding. The DC gain is therefore `20^5 / 2^22 = 0.763`: a
full-scale input cannot saturate the output. Latency: 17 clocks.

## Parallel halfband: two paths, symmetric pre-addition

A halfband filter of length `2N+1` has `h(N) = 0.5`, zeros at every other even
offset from the centre, and symmetric taps `h(k) = h(2N-k)`. A decimate-by-2
output is therefore

```
y(m) = x(2m+1-N)/2 + sum_j c_j * ( x(2m+1-k_j) + x(2m+1-(2N-k_j)) )
```

where `k_j` runs over the `(N+1)/2` nonzero taps left of the centre. The first
term is the delay-only path: it needs only a shift, no multiplier. The second
term is the polyphase path. Because the taps are symmetric, the two samples
that share a coefficient are added first, so each output needs `(N+1)/2`
multipliers instead of `2N+1`.

`par_halfband` takes `L_IN` lanes and produces `L_IN/2`. Output lane `p` is
one copy of this filter: its newest sample is input lane `2p+1`. All copies
read one window, made of the current clock's lanes and the last `2N` samples
kept in registers. With order 122 (`N = 61`) each output lane needs 31
multipliers. The 4→2 stage therefore has 62 and the 2→1 stage 31; these are
the DSP counts the paper reports for the two stages. Pipeline: pre-add,
multiply, sum with round and saturate. Latency: 3 clocks.

`par_src` is `par_cic` followed by the two halfbands. It turns 80 lanes into
one sample per clock. Total latency: 23 clocks.

## Serial half

* **`ser_cic`**: a Hogenauer CIC with `N = 5` and `M = 1`. Its ratio input
  `rate` (1..4000) is read at run time. The internal width,
  `16 + ceil(5*log2 4000) = 76` bits, covers every ratio. The scaling follows
  the ratio: the output is shifted right by `ceil(log2(rate^5))` with rounding,
  so the DC gain stays between 0.5 and 1 at every ratio (1 at `rate = 1`, where
  the filter is transparent). The integrators are pipelined, so integrator `s`
  adds the previous-sample value of integrator `s-1`. As a result, output `k`
  is the ideal CIC taken at input index `k*rate + rate - 5`. Latency: 7
  clocks after the last input of a group.
* **`ser_halfband`**: order 238 (`N = 119`) with 60 distinct nonzero
  coefficients and 30 multipliers, which is the paper's DSP count. After every
  second input the 60 pre-added pairs and the centre sample are captured in one
  clock. The multipliers then work through the pairs in two passes. Outputs are
  due at most every second clock, so two passes always keep up, even at one
  input per clock. An assertion flags inputs arriving faster than that.
  Latency: 4 clocks after the second input of a pair.
* **`ser_src`**: the CIC and three halfbands in cascade. `hb_used` (0..3)
  selects how many halfbands are in the path. Stages past that receive no
  samples, and the output is taken after the last used stage.

## Configuration

`psrc_top` holds the serial configuration in a register:

| port          | meaning                                                                     |
|---------------|-----------------------------------------------------------------------------|
| `cfg_load`    | latch `cfg_rate` and `cfg_hb_used`; clear the serial half on the next clock |
| `cfg_rate`    | serial CIC ratio; 0 is taken as 1, values above 4000 as 4000                |
| `cfg_hb_used` | serial halfband stages used, 0..3                                           |

The parallel half is never cleared by a reconfiguration. A sample of `mid` that
arrives in the clearing clock is not passed to the serial half. To get a clean
change of ratio, stop `in_valid` for about 60 clocks so that the pipeline
drains, then load the new configuration.

Examples (output rate at 20 GSPS input):

| total decimation | `cfg_rate` | `cfg_hb_used` | output rate  |
|-----------------:|-----------:|--------------:|-------------:|
| 80               | 1          | 0             | 250 MSPS     |
| 160              | 1          | 1             | 125 MSPS     |
| 640              | 1          | 3             | 31.25 MSPS   |
| 1600             | 20         | 0             | 12.5 MSPS    |
| 3840             | 6          | 3             | 5.208 MSPS   |
| 2,560,000        | 4000       | 3             | 7.8125 kSPS  |

Only totals of the form `80 * rate * 2^k` can be configured. With all three
halfbands in use these are the 4000 ratios `640*rate`. The halfbands give the
sharp anti-aliasing edge, so ratios with `hb_used = 3` have the best alias
rejection near the band edge. With fewer halfbands the CIC's slow roll-off
sets the edge.

## Number formats

* Samples: 16-bit two's complement at input, at the intermediate `mid` port
  and at the output.
* Coefficients: 16-bit Q1.15; the centre tap is exactly `0.5 = 16384`.
* Every rounding is round-half-up (add half an LSB, shift right
  arithmetically), followed by saturation to 16 bits. The halfbands can
  saturate on full-scale inputs near the band edge, because of the
  filter's overshoot; the CICs, with gain at most 1, do not.

## Halfband coefficients

The coefficients are computed at elaboration by `src_pkg::hb_coef`:

```
h(k) = 0.5 * sinc((k-N)/2) * w(k),   w(k) = I0(beta*sqrt(1-((k-N)/N)^2)) / I0(beta)
beta = 0.1102 * (70 - 8.7) = 6.755    (Kaiser's formula for 70 dB)
```

They are rounded to Q1.15. The centre tap is 0.5 exactly, and the taps at even
offsets from the centre are exactly zero. After rounding, the order-122 filter
reaches about 68 dB at a transition width of 0.035 of its input rate, and the
order-238 filter about 69 dB at 0.02. These were computed offline from the
same formula. The paper specifies 70 dB with transition widths of 0.03 and
0.015 but does not publish its coefficients; an equiripple design would meet
that more closely. To use other coefficients, replace `hb_coef`; nothing else
depends on them. A new set must keep the zero and symmetry pattern.

## Where this departs from the paper or fills a gap

* The paper builds the serial CIC and all halfband multiply-adds from vendor IP
  cores. Here they are plain RTL with the same parameters.
* The parallel downsampler is only named in the paper. The lane selection and
  the kept phase (`n mod R = 0`) are this design's choice.
* In the paper, the printed `M = 1` equation for the parallel comb has typos
  in its lower rows. The comb follows the paper's figure and its general
  equation for any `M`.
* The paper's first integrator equation sums up to `n-1`, but its parallel
  derivation sums up to `n`. The derivation is followed: the integrator
  includes the current sample.
* The following are this design's own: the bit widths, the CIC scaling rule,
  the register placement and all latencies; the decimation phases (halfband
  output `m` aligned to input `2m+1`, serial CIC keeping the last sample of a
  group); the stage bypass that gives the ratios below 640; the configuration
  port with its clamping; the reset behaviour (synchronous, active low,
  clearing all filter state); and the valid handshake, which lets the input
  pause.
* One real channel is built. A complex baseband stream, as produced by a
  digital down-converter ahead of the converter, needs two instances.
* The digitiser and the down-conversion mixer ahead of the converter are not
  part of this RTL. Their output enters on `x`/`in_valid`.

## Verification

Each block has a self-checking testbench in `tb/`. Most compare the block with
a textbook serial model from `tb/tb_ref_pkg.sv`: a serial CIC in 128-bit
arithmetic, or a full 2N+1-tap convolution for a halfband. The models
get only the coefficient values from the RTL. The testbenches also check the
latencies given above and the output counts.

| testbench            | what it runs                                                                                   |
|----------------------|------------------------------------------------------------------------------------------------|
| `adder_matrix_tb`    | 80-lane prefix sums: random, all-ones and extreme vectors                                      |
| `par_integrator_tb`  | 80 lanes with random gaps vs. a running sum; full-scale start                                   |
| `par_downsampler_tb` | lane indices through the selector                                                               |
| `par_comb_tb`        | 4 lanes vs. a serial difference, delays `M` = 1, 3 and 6                                         |
| `par_cic_tb`         | 80 → 4 lanes vs. a serial CIC; full-scale positive and negative steps, random data; also an 8-lane `R = 4`, `N = 3`, `M = 2` instance |
| `par_halfband_tb`    | 4 → 2 lanes vs. convolution; impulse, saturating square wave, random data; also a 2 → 1 lane instance with even `N` |
| `par_src_tb`         | 80 lanes → 1 vs. CIC + 2 halfband models                                                        |
| `ser_cic_tb`         | ratios 1, 2, 3, 5, 20, 137, 4000                                                                |
| `ser_halfband_tb`    | one input per clock (both multiplier passes back to back), then with gaps; saturating square wave |
| `ser_src_tb`         | seven (ratio, halfbands used) settings                                                          |
| `psrc_top_tb`        | full size, no parameter overrides: totals 80 up to 2,560,000 (including 4480 and 5120 from the paper's table); ratio clamping; input gaps; reconfiguration |
| `psrc_multitone_tb`  | eight wanted tones at 10-80 MHz plus eight tones at 175-245 MHz that fold between them, total 80: each wanted tone within 0.05 dB of the amplitude predicted from the CIC and halfband responses, passband spread at most 0.72 dB, every folded tone more than 70 dB down (measured 75-86 dB) |
| `ser_src_maxratio_tb` | serial half alone at ratio 4000 with all three halfbands (the 2,560,000 setting): three wanted tones within 0.05 dB of the predicted response, three tones that would fold between them more than 70 dB down (measured 79-88 dB) |
| `psrc_alias_tb`      | 50 MHz wanted tone plus a 7.04 GHz tone at 20 GSPS, total 80: wanted gain within 1 dB, folded tone more than 70 dB down |

In the last test the 7.04 GHz tone sits 40 MHz from a zero of the parallel
CIC. It is attenuated below the output LSB, so the 40 MHz output bin is
exactly zero.

To run a testbench with Verilator (here `psrc_top_tb`, about 10 s):

```
verilator --binary --timing --assert -y rtl -y tb --top-module psrc_top_tb \
    rtl/src_pkg.sv tb/tb_ref_pkg.sv tb/psrc_top_tb.sv -o sim
./obj_dir/sim
```

The packages are named explicitly; the modules are found in `rtl/` and `tb/`.
Block testbenches that do not use the reference package need only
`rtl/src_pkg.sv` and their own file. Each testbench ends with a line
`TB_RESULT checks=N failures=M`.

## Files

| file                       | contents                                                          |
|----------------------------|-------------------------------------------------------------------|
| `rtl/src_pkg.sv`           | sizes, CIC growth, halfband coefficient functions, rounding        |
| `rtl/adder_matrix.sv`      | lane prefix sum                                                   |
| `rtl/par_integrator.sv`    | parallel integrator (matrix + accumulator + adder line)           |
| `rtl/par_downsampler.sv`   | lane selector                                                     |
| `rtl/par_comb.sv`          | parallel comb                                                     |
| `rtl/par_cic.sv`           | parallel CIC                                                      |
| `rtl/par_halfband.sv`      | parallel two-path halfband                                        |
| `rtl/par_src.sv`           | parallel half                                                     |
| `rtl/ser_cic.sv`           | programmable serial CIC                                           |
| `rtl/ser_halfband.sv`      | time-shared serial halfband                                       |
| `rtl/ser_src.sv`           | serial half with stage bypass                                     |
| `rtl/psrc_top.sv`          | top level with configuration register                             |
