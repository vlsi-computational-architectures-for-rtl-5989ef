# An 8-point DCT from ten non-uniform samples: arithmetic cosine transform in SystemVerilog

The discrete cosine transform of eight samples normally needs irrational
constants: cos(k·π/16). The arithmetic cosine transform (ACT) avoids them. It
does not use the eight evenly spaced samples v(0), …, v(7). Instead it uses ten
samples taken at fixed uneven positions,

    r ∈ { -1/2, 25/14, 13/6, 27/10, 7/2, 57/14, 29/6, 59/10, 89/14, 15/2 }

Number theory then turns those samples into the DCT coefficients using only
additions, subtractions and multiplications by small integers. For a signal
with zero mean the result is exact: the only error is the rounding of the
inputs. Such samples cannot come from a normal sampled stream without
interpolation. They can, however, come straight from a sensor array whose
elements sit at those positions.

This RTL implements two pipelined datapaths built on that idea:

* **Architecture I** (`null_mean_act`): the ACT for signals with zero mean.
  It has no multipliers, only 36 two-input adders including those inside the
  constant multipliers. It outputs V1…V7.
* **Architecture II** (`act_arch2`, the top level): the DCT of any signal.
  It also computes the mean from the same ten samples, corrects the
  Architecture I outputs with the Mertens function, and outputs V0 as well.
  It adds eleven constant multipliers (ten weights and √2) and 18 adders.

Both accept one 10-sample vector per clock and return one 8-point transform
per clock.

## The arithmetic

Take the 8 uniform samples v_n as values of a signal v(t) sampled at
t = 0, 1, …, 7. Extend the signal evenly about t = -1/2 with period 16, as the
DCT-II implies. Then v(r) = v(15 - r) for every r, and v(r + 16) = v(r).

**ACT averages.** For k = 1…7,

    S_k = (1/k) · Σ_{m=0}^{k-1} v(16m/k - 1/2)

Once the sample positions are folded into [-1/2, 15/2] with v(r) = v(15 - r),
only ten distinct positions remain. These are the ten inputs. Several averages
use a position twice, which is where the factors of 2 come from:

| k | k·S_k |
|---|-------|
| 1 | v(-1/2) |
| 2 | v(-1/2) + v(15/2) |
| 3 | v(-1/2) + 2v(29/6) |
| 4 | v(-1/2) + v(15/2) + 2v(7/2) |
| 5 | v(-1/2) + 2v(27/10) + 2v(59/10) |
| 6 | v(-1/2) + v(15/2) + 2v(29/6) + 2v(13/6) |
| 7 | v(-1/2) + 2v(25/14) + 2v(57/14) + 2v(89/14) |

**Möbius inversion.** If v has zero mean, then for an 8-point DCT

    V_k = 2 · Σ_{l=1}^{⌊7/k⌋} μ(l) · S_{kl}

Here μ is the Möbius function: μ(1..7) = 1, -1, -1, 0, -1, 1, -1. Written out:

    V1 = 2(S1 - S2 - S3 - S5 + S6 - S7)
    V2 = 2(S2 - S4 - S6)
    V3 = 2(S3 - S6)
    V4..V7 = 2·S4 .. 2·S7

**Staying in integers.** The 1/k factors are the only fractions. The design
multiplies every S_k by 420 = lcm(1, …, 7), so each k·S_k is multiplied by
the integer 420/k ∈ {420, 210, 140, 105, 84, 70, 60}. Every output is then
**210·V_k**. The input's binary point never moves: every signal in the design
has L-1 fractional bits.

**Mean from non-uniform samples.** A signal with a non-zero mean v̄ needs a
correction, and v̄ is normally the average of the uniform samples, which are
not available here. The ten samples are, however, an exact linear function of
the eight uniform ones, v_r = W·v. The interpolation weights w_n(r) come from
the Dirichlet kernel D_7. W has full column rank, so v = W⁺·v_r and

    v̄ = (w/8) · v_r ,  w = column sums of W⁺

The ten weights are fixed constants. In input-port order they are 0.131763,
0.148473, 0.166302, 0.389747, 0.018838, 0.269802, -0.313307, 0.498388,
-0.178465 and -0.131542. `act_pkg::mean_weight` holds them to 15 digits.

**Mertens correction.** With a mean present,

    V_k = 2 · Σ μ(l) S_{kl}  -  2 · v̄ · M(⌊7/k⌋)

where M(n) = μ(1) + … + μ(n) is the Mertens function. M(7) = -2, M(3) = -1,
M(2) = 0 and M(1) = 1. Scaled by 210, the correction adds +840·v̄ to V1 and
+420·v̄ to V2, leaves V3 alone, and adds -420·v̄ to V4…V7. Finally
V0 = √8·v̄, which becomes 420·√2·v̄ after scaling.

## Input and output conventions

The ten samples enter on `v_in[0..9]` in the order the signal-flow graph draws
them, not in the order of r. `act_pkg::sample_e` names each index:

| index | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|-------|---|---|---|---|---|---|---|---|---|---|
| r | -1/2 | 15/2 | 29/6 | 7/2 | 27/10 | 59/10 | 13/6 | 25/14 | 57/14 | 89/14 |

Samples are L-bit two's complement with L-1 fractional bits, so they cover
[-1, 1). `v_out[k-1]` carries 210·V_k and `v0` carries 210·V_0, both with L-1
fractional bits. To recover V_k, divide the output by 210·2^(L-1).

## Architecture I: the null-mean datapath (`null_mean_act`)

The signal-flow graph has 35 numbered points. The RTL keeps those numbers in
its signal names (`p19`, `p23`, …) so that the word-length table below can be
checked line by line.

| points | what | hardware |
|--------|------|----------|
| 1–10 | input samples | register |
| 11–18 | 2× samples 3–10 | wiring (shift) |
| 19–22, 24, 23 | 4S4, 5S5, 6S6, 7S7, 3S3, 2S2 | 12 adders, register |
| 25–31 | 420·S1 … 420·S7 | shift-add constant multipliers (16 adders), register |
| 32, 34, 35 | S1+S6, S2-S4-S6, S3-S6 | 4 adders, register |
| 33 | (S1+S6) - S2 - S3 - S5 - S7 | 4 adders, register |

The constant multipliers (`shift_add_mult`) recode the constant at
elaboration time into canonical signed digits, also called the non-adjacent
form of Booth recoding. For example, 420 = 512 - 128 + 32 + 4 and
105 = 128 - 32 + 8 + 1. The multiplier then adds or subtracts shifted copies
of the input. 420, 210 and 105 cost three adders each; 140, 84 and 70 two;
60 one. Together with the 12 adders that form k·S_k and the 8 Möbius adders,
that makes the 36 adders of Architecture I.

## Architecture II: mean, Mertens correction and V0 (`act_arch2`)

```
 v_in ─┬──────────────► null_mean_act ── 210·V1..7 (null-mean) ──► mertens_correction ──► v_out
       │                  (5 cycles)                                  ▲     (1 cycle)
       └► mean_calc ─► v̄ ─► ×420 (shift-add) ─► 58 ─► delay 1 ───────┘
          (3 cycles)  (56)     register 58      │
                                                └► ×√2 ─► 57 ─► delay 1 ─► v0
```

* **`mean_calc`** (points 36–56) registers the inputs, multiplies each one by
  its weight, registers the ten products, and adds them into an (L+1)-bit
  mean.
* **420·v̄** (point 58) uses the same shift-add structure as Architecture I.
* **`mertens_correction`** (points 58–66) forms 840·v̄ by a shift (point 59).
  It adds it to V1, adds 420·v̄ to V2, passes V3 through, and subtracts
  420·v̄ from V4…V7.
* **V0** (point 57) is √2 × point 58.

Both architectures see the same ten inputs. The mean path is two cycles
shorter than the null-mean path, so point 58 passes through one alignment
register before it reaches the correction. An assertion in `act_arch2`
checks that the two paths stay in step.

### Constant multipliers with fractional constants (`frac_const_mult`)

Each of the ten mean weights and √2 is rounded to CF fractional bits at
elaboration time (default CF = L-1). The product is then rounded back to the
input's L-1 fractional bits: half an LSB is added, and the sum is shifted right
arithmetically. The operator is a plain `*` by a constant, which synthesis
turns into adders. These eleven are the only multipliers in Architecture II.

## Word-lengths

A signal at point p is L + ΔL bits wide. The ΔL values are the published
ones, and the RTL uses them unchanged (`act_pkg::DL_*`):

| points | ΔL | points | ΔL |
|--------|----|--------|----|
| 1–10 | 0 | 36–55 | 0 |
| 11–18 | 2 | 56 (v̄) | 1 |
| 19–22, 24 | 3 | 57, 59, 61, 62 | 13 |
| 23 | 1 | 58 (420·v̄) | 11 |
| 25, 26, 31 | 10 | 60 (V1) | 14 |
| 27, 32, 34 | 12 | 63–66 (V4–V7) | 12 |
| 28–30 | 11 | | |
| 33, 35 | 13 | | |

Architecture I cannot overflow with these widths: |420·S_k| ≤ 420 and
|210·V1| ≤ 2520 for inputs in [-1, 1). The ports share one width per output
group: null-mean outputs are L+13 bits, corrected outputs L+14 and v0 L+13.
Narrower points are sign-extended to that width.

The one range that is not guaranteed is the mean, point 56, which has
L+1 bits and so holds [-2, 2). The absolute weights sum to 2.25. Ten
independent full-scale inputs with adversarial signs can therefore wrap the
sum. Samples of one real signal bounded by 1 cannot wrap it, because its mean
is bounded by 1. Nothing saturates.

## Pipeline timing

All arithmetic between numbered points is registered except the ×2 shifts
(points 11–18 and 59), which are wires. The latencies are:

| block | latency (cycles) | stages |
|-------|------------------|--------|
| `null_mean_act` | 5 | 1–10 → 19–24 → 25–31 → 32/34/35 → 33 |
| `mean_calc` | 3 | 36–45 → 46–55 → 56 |
| `mertens_correction` | 1 | 60–66 |
| `act_arch2` | 6 | mean 3 + point 58 + one alignment register, against null-mean 5, then Mertens 1 |

Throughput is one transform per cycle with no stalls. `in_valid` travels down
a shift register beside the data and emerges as `out_valid`. Only those valid
bits are reset (asynchronous, active-low `rst_n`); data registers are not
reset.

## Accuracy

`tb_act_workload` streams 10,000 random 8-point signals for each input
word-length. The samples are built with the interpolation formula above and
rounded to L bits. Architecture I gets signals with zero mean; Architecture II
gets signals with a random offset. PSNR is measured against full scale, as
10·log10(1/mean-square error) over all coefficients:

| L | Arch. I (this RTL) | Arch. I (published) | Arch. II (this RTL) | Arch. II (published) |
|---|------|------|------|------|
| 8 | 50.7 | 50.3 | 34.8 | 38.8 |
| 12 | 74.8 | 74.3 | 58.6 | 63.0 |
| 16 | 98.9 | 98.4 | 83.1 | 87.1 |
| 20 | 123.0 | 122.4 | 107.4 | 110.8 |
| 24 | 147.0 | 145.6 | 131.4 | 135.4 |
| 28 | 171.1 | 170.6 | 155.4 | 159.4 |
| 32 | 195.2 | 194.7 | 179.4 | 183.4 |

Architecture I matches the published figures to within about half a dB. Its
error is entirely the input rounding: the maximum error stays below
12·2^-L, as the algebra predicts. Architecture II is consistently about 4 dB
below the published figures. Its error comes from the mean, which the
Mertens correction multiplies by up to 4. The published description fixes
neither the rounding of the products nor the coefficient precision, so both
had to be chosen here:

* Truncating the products instead of rounding them costs another 18 dB.
* More coefficient bits gain less than 1 dB.

The remaining gap is unexplained. It may come from a different test-signal
distribution or PSNR definition.

## What follows the published design, and what is this RTL's own

From the published design:

* the sample positions and their order;
* the signal-flow graphs of both architectures, including every adder input
  and every constant (420, 210, 140, 105, 84, 70, 60; the ten mean weights;
  420; √2; the ±1 and ×2 of the Mertens block);
* the word-length of every numbered point;
* the use of shift-and-add structures for integer constants, with the
  resulting adder and multiplier counts.

Chosen here, because the published description does not say:

* where the pipeline registers sit, and hence the latencies 5, 3, 1 and 6;
* the alignment registers;
* the `in_valid`/`out_valid` signals and the reset;
* canonical-signed-digit recoding as the form of Booth recoding;
* L-1 fractional bits for the fractional coefficients;
* round-to-nearest for their products;
* the default L = 12 (8 and 12 are the two published implementation points).

Outside the RTL:

* The ten input samples come from sensors placed at the positions r, or from
  an interpolator. That front end is not part of this design.
* Points 36–45 of Architecture II and points 1–10 of Architecture I are the
  same samples. Each block keeps its own input register, so the top level
  holds two copies of the input vector.

## Files

| file | contents |
|------|----------|
| `rtl/act_pkg.sv` | sizes, sample order, ΔL table, mean weights, constant quantiser |
| `rtl/shift_add_mult.sv` | integer constant multiplier by canonical signed digits |
| `rtl/frac_const_mult.sv` | rounded fractional-constant multiplier |
| `rtl/delay_line.sv` | register chain for alignment |
| `rtl/null_mean_act.sv` | Architecture I |
| `rtl/mean_calc.sv` | mean from the ten samples |
| `rtl/mertens_correction.sv` | Mertens correction |
| `rtl/act_arch2.sv` | Architecture II, top level |
| `tb/act_ref_pkg.sv` | reference models from the definitions: ACT sums with position folding, Möbius and Mertens functions, bit-true mean, Dirichlet interpolation, floating-point DCT |
| `tb/tb_<block>.sv` | self-checking testbench for each block |
| `tb/tb_act_workload.sv` | accuracy sweep over L = 8 … 32 |

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog if the design hangs.

* The block testbenches compare bit for bit against models written from the
  formulas, not from the hardware structure. They also check latency and
  back-to-back throughput.
* `tb_act_arch2` runs the top level at its default parameters, both bit for
  bit and against the floating-point DCT. It counts back-to-back inputs, idle
  gaps, mean-corrected vectors, null-mean signals and offset signals, and
  fails if any of them never occurs.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/act_pkg.sv tb/act_ref_pkg.sv tb/tb_act_arch2.sv --top-module tb_act_arch2 -o sim
./obj_dir/sim
```

To run another testbench, replace `tb_act_arch2` with its name. To lint a
single block, use `verilator --lint-only -Wall -Irtl rtl/act_pkg.sv rtl/<block>.sv`.
To change the word-length, set `L` on `act_arch2` or `null_mean_act`. All
widths follow from L, and L = 8 … 32 has been simulated. `CF` on `act_arch2`
sets the precision of the eleven fractional coefficients on its own.
