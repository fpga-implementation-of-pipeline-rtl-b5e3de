# A 16-point radix-2² SDF FFT with a digit-slicing, multiplier-less twiddle multiplier

In a pipelined FFT the twiddle-factor multiplier is the slowest and largest
part of the datapath. The twiddle factors are constants known at design time,
so a multiplication by one of them does not need a general multiplier. Cut the
data word into 4-bit digits. Look up the product of each digit with the
constant in a small table. Shift the partial products into place and add them.
This is *digit slicing*. This design puts such a multiplier-less complex
multiplier into a standard 16-point radix-2² single-path delay-feedback
(R2²SDF) FFT pipeline. The pipeline takes one complex sample per clock and
returns one frequency bin per clock. No hardware multiplier is used anywhere.

The architecture follows Algnabi, Teymourzadeh, Othman and Islam, *FPGA
Implementation of Pipeline Digit-Slicing Multiplier-Less Radix 2² DIF SDF
Butterfly for Fast Fourier Transform Structure*. That paper gives the block
structure, the butterflies, the digit-slicing scheme and the number format. It
leaves the control unit, the pipeline registers, the exact rounding and
several widths open. The sections below say which parts are the paper's and
which are choices made here.

## The pipeline

```
 x ──► Butterfly I ──► Butterfly II ──► twiddle multiplier ──► Butterfly I ──► Butterfly II ──► X
      feedback 8     feedback 4, -j     W_16^e (ds_cmult)     feedback 2     feedback 1, -j
          ▲              ▲                    ▲                    ▲              ▲
          └──────────────┴──────── fft_ctrl (frame counter) ───────┴──────────────┘
```

The radix-2² algorithm splits the 16-point DFT into two radix-4 stages. Each
radix-4 stage is two radix-2 butterflies, and the multiplication by -j
between them is trivial. Only one real twiddle multiplication sits between the
two stages. In the SDF form, each butterfly has a feedback register of L words
(L = 8, 4, 2, 1). It pairs each sample with the one that arrived L clocks
earlier:

* **Store phase** (control = 0): the incoming word goes into the feedback
  register. The word coming out of it is passed to the output. That word is a
  difference saved in the previous half block.
* **Butterfly phase** (control = 1): the output is `(fb + a)/2`, and
  `(fb - a)/2` goes back into the feedback register.

Every butterfly divides by two, with round-half-up. The pipeline therefore
returns `X[k]/16`, and no stage can overflow. The only rounded half that
would not fit, that of 32767 - (-32768), is clamped to 32767. Inputs need |x| < 1 (complex
magnitude). With that, no intermediate value leaves the Q1.15 range.

### Multiplication by -j (Butterfly II)

`-j·(yr + j·yi) = yi - j·yr`. Butterfly II does not negate anything. A swap
multiplexer exchanges the real and imaginary inputs, and the imaginary
adder and subtracter change places:

```
out = ((fr + yi) + j(fi - yr)) / 2        fb = ((fr - yi) + j(fi + yr)) / 2
```

This also avoids the overflow of `-(-32768)`. Butterfly II has two controls.
`c2` is its own store/butterfly phase. `c1` is high while the Butterfly I in
front of it emits differences. The swap happens when both are high.

## Digit-slicing multiplier-less multiplication

A 16-bit two's complement fraction x is written as four 4-bit digits:

```
x · 2^15 = X3·2^12 + X2·2^8 + X1·2^4 + X0,   X0..X2 ∈ 0..15,  X3 ∈ -8..7
```

The top digit carries the sign: its top bit weighs -8. So the multiplier
(`ds_mult`) computes

```
K·x = ( (K·X3)<<12 + (K·X2)<<8 + (K·X1)<<4 + K·X0 ) >> 15
```

Each `K·Xk` is read from a table (`ds_rom`). The sum of the shifted table
entries equals `K·x` exactly. The only error is the final right shift, which
truncates. For each constant K there are two 16-entry tables: `K·d` for
`d = 0..15` (digits 0 to 2) and `K·d` for `d = -8..7` (the sign digit). One
table holds the entries for all sixteen twiddle exponents, addressed by
`{e, digit}`. The entries are computed at elaboration as
`entry(e, d) = coef(e) · d`. Here `coef` comes from a five-value Q15 table of
cos(2πk/16): 32768, 30274, 23170, 12540, 0.

`ds_mult` has two pipeline stages: the table read, then the shift, add and
right shift.

## The complex twiddle multiplier

`ds_cmult` uses the three-multiplication form of a complex product. With
W = Wr + jWi the twiddle and E = Er + jEi the data:

```
Re = Er·(Wr - Wi) + Wi·(Er - Ei)
Im = Ei·(Wr + Wi) + Wi·(Er - Ei)
```

Wr - Wi, Wr + Wi and Wi are constants, so they live in three product tables.
Only data values are sliced: Er, Ei (four digits each) and Er - Ei (17 bits,
sign-extended to five digits). The constants reach ±1.414, so the tables hold
17-bit constants. The scaling is still Q15, and 1.0 is exact (32768). The
three products are added in pairs and saturated to 16 bits. Saturation can
only act if |E| > 1, which the input range rules out.

Latency is 4 clocks: pre-subtract, table read, shift/add, then final add and
saturate.

## Control schedule

`fft_ctrl` holds a 4-bit counter `cnt`. It is 0 on the first clock after
reset is released, and sample x[n] of each frame enters with `cnt = n`. Each
unit gets a bit pattern of `cnt` minus the latency in front of it:

| unit | control |
|---|---|
| Butterfly I, L=8 | `c1 = cnt[3]` |
| Butterfly II, L=4 | `c = cnt-1`: `c2 = c[2]`, `c1 = !c[3]` |
| twiddle multiplier | `q = cnt+2`: `e = q[1:0] · bitrev2(q[3:2])` |
| Butterfly I, L=2 | `c1 = (cnt-2)[1]` |
| Butterfly II, L=1 | `c = cnt-3`: `c2 = c[0]`, `c1 = !c[1]` |
| output | `out_k = bitrev4(cnt-7)` |

The twiddle exponents reaching the multiplier repeat
`0 0 0 0 | 0 2 4 6 | 0 1 2 3 | 0 3 6 9`, the order of the 16-point signal
flow graph. Results leave in bit-reversed order: X[0], X[8], X[4], X[12],
X[2], … Each result is tagged with `out_k`.

## Timing and interface of the top (`r22sdf_fft16`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset clears every register |
| `x` | in | `cplx_t` {re, im}, 16-bit Q1.15 each, one sample per clock, no gaps |
| `y` | out | `X[out_k]/16`, same format |
| `out_valid` | out | high from the first result on |
| `out_k` | out | frequency index of `y` |

Frames follow each other with no gap, starting on the first clock after reset.
There is no valid/stall input, because an SDF pipeline never stops. The
latency from x[0] to X[0] is 23 clocks. Of these, 15 come from the SDF
structure itself, 4 from the butterfly output registers and 4 from the
multiplier.

## Accuracy

Across impulse, constant, tone, full-scale and random frames, every result is
within 2 LSB of a double-precision DFT divided by 16. There are three sources
of error: the round-half-up halving in each butterfly, the truncation of each
table-based product, and the Q15 rounding of the twiddles.

The multiplier also reproduces two worked examples:

* 0.57 × 0.7071 gives 0.4031.
* A test vector with W = 0x5a82 + j0xa57e (that is, W_16²), fed through a
  radix-2 butterfly built around the multiplier in the testbench, gives
  0x2bc4 + j0xf137 and 0x0e99 + j0x12a0 within 1 LSB.

## Where this RTL goes beyond, or differs from, the published description

* **Control unit, pipeline registers, latency.** The paper does not give
  these. The counter scheme, the registered butterfly outputs and the
  2-stage / 4-stage multiplier pipelines are choices made here.
* **Rounding.** The paper says only that halving and rounding are used.
  Round-half-up is chosen for the butterflies, clamped at 32767. The
  multiplier truncates, as its "right shift by 15" implies.
* **Which operand is constant in the 3-multiplication form.** The data is
  sliced and the twiddle-derived constants are tabulated. This needs a 17-bit
  constant width instead of 16, and a fifth digit for Er - Ei.
* **Sign digit table.** The paper stores 16 products per twiddle. A second
  16-entry table serves the signed top digit here.
* **One table per constant kind, not per twiddle.** All twiddles of the
  16-point FFT share one table indexed by exponent. The lookup is the same.
* **Saturation** at the multiplier output is an addition.
* **Meaning of C1 at Butterfly II.** It is defined as "the preceding
  Butterfly I emits differences", so that C1 & C2 marks the -j samples, as
  the paper describes.
* **The published simulation and schematic.** They show a single radix-2
  butterfly. Its complex inputs A and B and the twiddle are buses, and it
  produces (A + B·W)/2 and (A - B·W)/2. This repository has no such
  standalone unit, because in the pipeline the twiddle comes from the tables
  and not from an input bus. Its published input and output values are
  reproduced by the twiddle multiplier's testbench instead.
* **FFT length.** The length is fixed at 16: two radix-2² stages, one twiddle
  multiplier. Longer lengths would need more stages and more multipliers, and
  the paper presents only 16.

## Files

| file | content |
|---|---|
| `rtl/fft_pkg.sv` | widths, `cplx_t`, twiddle constants, rounding and bit-reversal helpers |
| `rtl/sdf_delay.sv` | feedback register chain of L words |
| `rtl/bf1.sv` | Butterfly I |
| `rtl/bf2.sv` | Butterfly II with the -j swap |
| `rtl/ds_rom.sv` | product tables, one or more read ports |
| `rtl/ds_mult.sv` | digit slicing + table lookup + shift/add real multiplier |
| `rtl/ds_cmult.sv` | three-multiplier twiddle multiplier |
| `rtl/fft_ctrl.sv` | frame counter and all controls |
| `rtl/r22sdf_fft16.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_r22sdf_fft16` runs the whole FFT |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Run one with plain Verilator. Give the package first; `-y rtl`
lets Verilator find the modules by file name:

```
verilator --binary --timing --assert -y rtl rtl/fft_pkg.sv tb/tb_r22sdf_fft16.sv \
          --top-module tb_r22sdf_fft16 -o sim
./obj_dir/sim
```

Replace the testbench file and top module name to run the unit tests
(`tb_bf1`, `tb_bf2`, `tb_sdf_delay`, `tb_ds_rom`, `tb_ds_mult`,
`tb_ds_cmult`, `tb_fft_ctrl`, and `tb_fft_pkg` for the package functions).
The end-to-end test streams 40 frames in well under a second. It also
counts how often the store and butterfly phases, the two -j swaps and each
twiddle exponent occurred, and fails if any never did.

## Changing it

* Data width: `fft_pkg::DW`. The digit count in `ds_mult` follows from its
  `DATA_W`. The rounding helper and the saturation in `ds_cmult` assume Q15
  scaling.
* Digit width: `fft_pkg::DIGIT_W`. Each table has 2^DIGIT_W entries per
  exponent, so wider digits mean fewer additions but larger tables.
* Twiddle precision: the cosine table in `fft_pkg::qcos16` and `CW`.
