# FPDA: a field programmable DSP array in SystemVerilog

An FPGA pays for flexibility with general-purpose logic blocks and routing
that a DSP datapath only partly uses. An ASIC wastes nothing but cannot
change function. The field programmable DSP array (FPDA) sits between them.
It is built from fixed DSP common modules: look-up tables, adders,
subtractors, multipliers, scaling accumulators and registers. A mode decoder
picks which of five functions the array computes:

| code D3..D1 | control | function |
|---|---|---|
| 1 | C1 | FIR filter, 16 taps |
| 2 | C2 | IIR filter (16 forward + 15 feed-backward taps) |
| 3 | C3 | 16-point DCT |
| 4 | C4 | FFT, 16 points, also 8, 4 or 2 |
| 5 | C5 | 3-level discrete wavelet transform (DWT) |
| other | none | inputs ignored |

Only one function is active at a time. Every function except the FFT does
its multiplications with *distributed arithmetic* (DA): the products are
precomputed and stored in small 16-entry LUTs, and the data bits address
them. Changing a function's coefficients therefore means rewriting LUT
words, not changing hardware. The FFT uses real multipliers, three per
butterfly.

This RTL follows the architecture described in A. Sinha, S. Acharyya,
S. Chakraborty and M. Sarkar, "Field Programmable DSP Arrays - A Novel
Reconfigurable Architecture for Efficient Realization of Digital Signal
Processing Functions", SIPIJ 4(2), 2013. The paper gives block diagrams and
equations. Word widths, timing, the configuration port and the control
sequencing are choices made here. They are marked as such below and in each
file's header.

## Structure

```
fpda_top
 ├─ mode_decoder          D3..D1 -> one-hot C1..C5
 ├─ fpda_interconnect     input strobe to the active unit, results to 16 output lanes
 ├─ pda_filter            FIR (C1) / IIR (C2)
 │   ├─ pda_fir (16 taps)    forward filter
 │   └─ pda_fir (15 taps)    feed-backward filter
 │       └─ fir_coef_unit ×taps  ── lut16 ×2
 ├─ dwt (3 levels)
 │   └─ decimator ×2 per level (high band, low band) ── pda_fir (8 taps)
 ├─ dct16
 │   ├─ dct_input_comb ×4
 │   ├─ lut16 ×24
 │   └─ scaling_accumulator ×16
 └─ fft16
     └─ butterfly ×8 ── complex_mult
```

`fpda_pkg` holds the widths, the mode encoding, the LUT write record and the
twiddle table.

The paper describes a single pool of common modules (adder array, multiplier
array, LUT array and so on) that an interconnection matrix wires into each
function. It does not describe that matrix's switches or its configuration
format. So here each function keeps its own datapath, and the interconnect
only steers strobes and results. The one real sharing built is between FIR
and IIR: both modes use the same forward filter and its 32 LUTs, and a 2:1
mux decides whether the feed-backward filter's output is added.

## Distributed arithmetic, and what goes into the LUTs

All coefficients are LUT contents written through the `cfg` port, so the
formulas below are the programming model. Coefficients are integers. The
tests use real value × 2^8 (`COEF_FRAC = 8`).

**Filter tap (`fir_coef_unit`).** The 8-bit sample x is split into two
nibbles, each addressing its own LUT. One adder sums the two LUT words. For
coefficient c and n = 0..15:

    low LUT[n]  = c * n
    high LUT[n] = c * (n < 8 ? n : n - 16) * 16

The sum is then exactly c·x for a two's-complement x. All eight sample bits
enter in parallel, so a filter gives one output per clock whatever its
length. The filters are a tap delay line, one such unit per tap and a binary
adder tree (`pda_fir`).

**DCT rows (`dct16`).** The 16-point DCT matrix splits into an even-even
4×4 part (Y0, Y4, Y8, Y12), an even-odd 4×4 part (Y2, Y6, Y10, Y14) and two
8×4 odd parts (Y1, Y3, …, Y15). Four input combination blocks fold the
quadruple (x_i, x_15-i, x_7-i, x_8+i) into:

- e_i = (x_i + x_15-i) + (x_7-i + x_8+i)
- f_i = (x_i + x_15-i) − (x_7-i + x_8+i)
- g_i = x_i − x_15-i
- h_i = x_7-i − x_8+i

Each matrix row gets one LUT, addressed by bit j of its four vector
elements. The LUT word at address m is the sum of the row coefficients k_i
over the set bits i of m. The LUT numbering is:

| LUT | row | address element i is |
|---|---|---|
| 0..3 | Y0 Y4 Y8 Y12 | e_i |
| 4..7 | Y2 Y6 Y10 Y14 | f_i |
| 8..15 | Y(2q+1), first half | g_i = x_i − x_15-i |
| 16..23 | Y(2q+1), second half | x_(4+i) − x_(11−i) = h_(3−i) |

The LUT words of LUT 8+q and LUT 16+q are added before one accumulator. For
row k the coefficients are cos((2n+1)kπ/32) for the n that the column
stands for. Any overall scaling, such as the 2/N and C_k of the DCT
definition, is the loader's choice. The tests leave both out.

**Scaling accumulator.** The vectors are processed one bit per clock, sign
bit first:

    y = −L(B−1)
    y = 2y + L(j)    for j = B−2 … 0

That is the two's-complement DA sum, exact in integers. B = 10, the width
of the widest folded value, so a transform takes B + 1 = 11 clocks.

Coefficient values printed in a paper can carry typos. The 4×4 matrix
printed for Y10 and Y14 does not agree with the DCT definition. Since the
coefficients are data here, the tests load values computed from the
definition.

## The IIR filter is an expanded FIR

The IIR mode adds a 15-tap *feed-backward* filter to the 16-tap forward
filter. Following the paper's implementation text, this filter is fed the
same input stream (one sample later), not the output y. Its LUTs hold the
feedback expressed in input terms, i.e. the tail of the impulse response:

- forward taps hold a[m]
- feed-backward taps hold h[m] − a[m] for m = 1..15, where h is the impulse
  response of the recursion

The result equals a true recursive IIR up to coefficient rounding and the
part of the response beyond 15 samples. `tb_fpda_workloads` runs
y[n] = 0.5x[n] + 0.25x[n−1] + 0.125x[n−2] + 0.25y[n−1] − 0.125y[n−2] this
way and stays within the computed error bound of the true recursion. A
filter with long-lived poles cannot be represented in this mode.

## DWT: decimators in a pyramid

A `decimator` is an 8-tap DA FIR followed by a load register. A 1-bit
counter lets the register take every second filter output. Samples enter at
one per clock and results leave at one every two clocks. In the paper the
counter clocks the register; here it is a load enable, so the design has a
single clock.

`dwt` stacks three levels. Each has a high-band and a low-band decimator.
The low band becomes the next level's input after a shift right by
`COEF_FRAC` and saturation to 8 bits. The outputs are three high bands
(1/2, 1/4 and 1/8 of the input rate) and the last low band (1/8). The tests
load the Daubechies 8-tap pair listed in the paper:

- high: −0.0106 −0.0329 0.0308 0.1870 −0.0280 −0.6309 0.7148 −0.2304
- low: 0.2304 0.7148 0.6309 −0.0280 −0.1870 0.0308 0.0329 −0.0106

LUT numbering: level·32 + band·16 + 2·tap + {0 low nibble, 1 high nibble},
where band is 0 for the high band and 1 for the low band.

## FFT: eight butterflies reused for four stages

`fft16` is the most intricate block. Sixteen complex registers REG0..REG15
feed eight radix-2 decimation-in-frequency butterflies. Butterfly k always
takes REGk and REG(k+8) and produces:

- Bk = a + b
- B(k+8) = (a − b)·W16^((k·2^s) mod 8) at stage s

In front of every register is a 4:1 mux selected by the stage number
{s1,s0}:

- stage 0 takes the inputs X
- stages 1 to 3 take the butterfly outputs wired back in the order the next
  stage needs

| stage | REG0..REG7 take | REG8..REG15 take |
|---|---|---|
| 1 | B0 B1 B2 B3 B8 B9 B10 B11 | B4 B5 B6 B7 B12 B13 B14 B15 |
| 2 | B0 B1 B4 B5 B8 B9 B12 B13 | B2 B3 B6 B7 B10 B11 B14 B15 |
| 3 | B0 B8 B2 B10 B4 B12 B6 B14 | B1 B9 B3 B11 B5 B13 B7 B15 |

This wiring is the one in the paper's FFT figure.

Smaller sizes use fourteen 2:1 muxes (select line s2). They sit on REG0-3
and REG8-11 at stage 1, REG0, 1, 8, 9 at stage 2 and REG0, 8 at stage 3,
and can load X (with the same index as the B they replace) instead of B.
Loading the inputs at stage 4 − log2 N and running the remaining stages
computes an 8-, 4- or 2-point FFT on the same hardware.

The complex multiplier needs three multipliers instead of four, at the cost
of storing cos−sin and cos+sin next to cos:

    R = (cos − sin)·b + cos·(a − b)
    I = (cos + sin)·a − cos·(a − b)

Twiddles are Q2.14 and products are rounded to nearest. There is no scaling
between stages. The 16-bit registers hold 8-bit inputs plus the 4 bits of
growth of a 16-point transform.

The output is not reordered. Bin positions:

| N | positions → bins |
|---|---|
| 16 | B0..B7 = X0 X4 X1 X5 X2 X6 X3 X7; B8..B15 = X8 X12 X9 X13 X10 X14 X11 X15 |
| 8 | B0 B1 B4 B5 = X0 X2 X1 X3; B8 B9 B12 B13 = X4 X6 X5 X7 |
| 4 | B0 B1 B8 B9 = X0 X1 X2 X3 |
| 2 | B0 B8 = X0 X1 |

## Top-level interface and timing

| port | meaning |
|---|---|
| `d_mode[2:0]` | mode code (table above); `c[4:0]` shows the decoded C1..C5 |
| `cfg` (`lut_cfg_t`) | `we`, `unit` (filter / DWT / DCT), `idx` (LUT number), `entry` (0..15), `data` (18 bits); one LUT word per clock |
| `in_valid`, `x_re[16]`, `x_im[16]` | FIR, IIR and DWT: one sample in `x_re[0]` per strobe, up to one per clock. DCT and FFT: one block of 16 per strobe, accepted while `busy` is low |
| `fft_log2n` | FFT size, 1..4 (2..16 points) |
| `y[16]`, `y_im[16]`, `y_lane[16]` | registered output lanes, each with its own strobe |

Lane use by mode:

- FIR and IIR: lane 0
- DWT: lanes 0..2 hold the high bands H1..H3; lane 3 holds the last low band
- DCT: lanes 0..15 hold Y0..Y15
- FFT: lanes 0..15 hold B0..B15, real part in `y`, imaginary part in `y_im`

| function | latency, strobe to `y_lane` | rate |
|---|---|---|
| FIR, IIR | 3 clocks | 1 sample per clock |
| DWT | level j band: 3j + 1 clocks after the sample that completes it | 1 input per clock |
| DCT | 12 clocks | 1 block per 11 clocks |
| FFT | 2 + log2 N clocks | 1 block per 1 + log2 N clocks |

Reset (`rst_n`) is asynchronous and active-low. It clears all control and
data registers but not the LUT storage. There is no combinational path from
input to output. Assertions check that at most one mode is selected and that
the two IIR filters stay aligned.

Word widths are in `fpda_pkg`:

| constant | value | meaning |
|---|---|---|
| `DATA_W` | 8 | sample width |
| `LUT_W` | 18 | LUT word |
| `ACC_W` | 24 | filter sums |
| `OUT_W` | 32 | output lanes |
| `FFT_W` | 16 | FFT registers |

The FIR length, the DWT level count and the FFT/DCT sizes are parameters,
but the FFT's stage wiring and the DCT's decomposition are written for 16
points.

## Where this departs from the paper, and what it leaves open

- **Interconnection matrix.** Functions are separate datapaths steered by a
  small router. Adders, multipliers and LUTs are not shared across functions
  through a switch matrix, except for the FIR/IIR filter.
- **Butterfly.** The paper's butterfly figure labels the lower output
  a − w·b, while its text specifies decimation in frequency. This design uses
  (a − b)·w, which its FFT stage wiring needs to give a correct transform.
- **LUT count in the decimator.** The paper's resource table gives 8 LUTs
  for the decimator, while its FIR text uses 2 LUTs per coefficient. Here
  every tap uses the two-nibble unit, so an 8-tap decimator has 16 LUTs.
- **Mode table vs block diagram.** The mode table gives DCT = C3 and
  FFT = C4; the block diagram draws them the other way round. The table is
  followed. The code on D3..D1 is this design's choice.
- **Decimator clocking.** The decimator's register is load-enabled, not
  clocked by the counter.
- **Resource counts.** The paper reports Virtex-5 synthesis results: slices,
  LUTs and about 200 MHz. Nothing here reproduces or checks them.
- **Own choices.** These are not specified by the paper and were chosen
  here: all widths, the output ordering, latencies, the configuration port,
  the reset, and the requantisation between DWT levels.

## Simulation

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each one prints `TB_RESULT checks=N failures=M`. `fpda_tb_pkg` holds the
LUT-content formulas used by the tests. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/fpda_pkg.sv tb/fpda_tb_pkg.sv tb/tb_fpda_top.sv \
        --top-module tb_fpda_top -o sim && ./obj_dir/sim

Substitute any other testbench name; the other modules are found through
`-Irtl`/`-Itb`.

- `tb_fpda_top` runs the whole array at its default sizes. It loads all
  LUTs and goes through every mode: DWT, FIR, IIR, FIR after reloading
  coefficients, DCT with a block dropped while busy, FFT at all four sizes,
  and no mode. It checks every result against a direct reference and counts
  that each mechanism occurred.
- `tb_fpda_workloads` runs 4-, 8- and 16-tap FIRs, the 3-tap IIR above, and
  an 8-point DCT. The 8-point DCT is the even outputs Y(2k) of the 16-point
  unit with x8..x15 = 0, which equal the 8-point transform with the same LUT
  contents.
- The unit tests check exact results for the DA datapaths. The FFT tests
  compare with a floating-point DFT within the rounding of the twiddle
  products. Where the timing above is defined, the tests check the cycle
  counts too.
