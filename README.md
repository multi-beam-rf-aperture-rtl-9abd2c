# Eight receive beams without multipliers: an approximate spatial FFT

A uniform linear array of 8 antennas can form 8 independent receive beams at
once. To do this, take one complex sample from every element at the same instant
and apply an 8-point DFT across the elements. DFT bin *k* is then the beam
pointed at the direction whose phase progression across the array matches
that bin. Computed exactly, even with an FFT, this needs complex multipliers
for the twiddle factors.

This design replaces the DFT matrix with an approximation, F8^, whose entries are
only 1, (±1±j)/2, ±j and ±1. A fast factorization then computes F8^ with
**26 complex additions (52 real adders), four one-bit shifts and no
multiplier**. The RTL is that factorization, pipelined with one adder level
per clock. It takes one 8-element snapshot per clock and produces the 8 beams
4 clocks later.

## The approximate transform

Multiplied by 2, so that every entry is a Gaussian integer, the matrix is:

```
        n=0   1     2     3     4     5     6     7
  k=0 [  2    2     2     2     2     2     2     2   ]
  k=1 [  2   1-j  -2j  -1-j   -2  -1+j   2j   1+j   ]
  k=2 [  2  -2j   -2    2j    2   -2j   -2    2j   ]
  k=3 [  2  -1-j   2j   1-j   -2   1+j  -2j  -1+j   ]
  k=4 [  2   -2    2    -2    2   -2     2   -2    ]
  k=5 [  2  -1+j  -2j   1+j   -2   1-j   2j  -1-j   ]
  k=6 [  2   2j   -2   -2j    2    2j   -2   -2j   ]
  k=7 [  2   1+j   2j  -1+j   -2  -1-j  -2j   1-j   ]
```

The even rows (beams 0, 2, 4, 6) equal the exact DFT rows. The odd rows
replace each eighth-root twiddle, (1-j)/sqrt(2) and its relatives, by
(1-j)/2. Magnitude is lost but the phase is kept, so the odd beams keep their
pointing direction and change only in side-lobe shape.

The factorization, applied right to left, is:

```
F8^ = P · diag(I2, A1, A3) · D2 · diag(B2, I2, A4) · D1 · diag(B4, A2) · B8
```

* `Bn = [[1,1],[1,-1]] ⊗ I(n/2)` is a column of radix-2 butterflies.
* `A1 = [[1,-1],[1,1]]`.
* `A2`, `A3` and `A4` are 4×4 matrices of 0 and ±1. Each of their rows has at
  most two non-zero entries.
* `D1 = diag(1,1,1,1,1,½,1,½)` holds the only scalings.
* `D2 = diag(1,1,1,j,1,j,j,1)` holds the only rotations.
* `P` reorders the results into natural beam order.

## How the factors map onto the pipeline

| Stage (module) | Factor(s) | Complex additions | Other operations | Word out |
|---|---|---|---|---|
| 1 `afft_stage1_b8` | B8: `y[k]=x[k]+x[k+4]`, `y[k+4]=x[k]-x[k+4]` | 8 | — | 17 bit |
| 2 `afft_stage2_b4a2d1` | B4 on 0..3; A2 on 4..7 (`y5=x5+x7`, `y7=x5-x7`); D1 | 6 | halve y5, y7 | 18 bit |
| 3 `afft_stage3_b2a4` | B2 on 0,1; pass 2,3; A4 on 4..7 | 6 | — | 19 bit |
| 4 `afft_stage4_d2a1a3p` | D2, then I2, A1, A3, then P | 6 | j folded in | 19 bit |

Each stage is one level of adders followed by a register. `afft8_beamformer`
chains the four stages and passes a valid bit down beside the data.

The hardest part to follow is **stage 4**. D2 multiplies elements 3, 5 and 6
by j. For a value a+jb, that gives -b+ja: a swap of the two parts and a sign
change. No negator is built. The sign goes into the adder that consumes the
rotated value. For example, with z3 = j·x3, the A1 output z2 - z3 becomes:

```
re = x2.re + x3.im        im = x2.im - x3.re
```

Every one of the 12 real adders in stage 4 is an add or a subtract of one real
part and one imaginary part. After those adders, the permutation P is plain
wiring: `V = (u0, u4, u2, u5, u1, u7, u3, u6)`.

A drawing of the signal-flow graph would show the last adders as butterflies
on rows (4,5) and (6,7), with beam labels V1, V7, V3, V5. These are the same
operations as A3 followed by P. Only the vertical order of the drawing
differs.

## Word lengths and the two halvings

* **Inputs.** The input is 16-bit I and Q per element.
* **Stages 1 to 3.** Each adder level grows the word by one bit, so no
  addition can overflow.
* **Stage 4.** Stage 4 grows nothing. In every row of F8^, |Re|+|Im| of the
  entries sums to exactly 8. So each beam component of a 16-bit vector stays
  within ±2^18 and fits 19 bits. Stage 4 forms its sums one bit wider, and an
  immediate assertion flags any result that would not fit. That can happen
  only when stage 4 is driven on its own with values stage 3 cannot produce.
  The testbench drives all 65,536 full-scale corner vectors without
  triggering it.
* **Halvings.** The two D1 halvings are arithmetic right shifts, so they
  floor. As a result, beams 1, 3, 5 and 7 can differ from the exact product
  F8^·v by at most one LSB per component. Beams 0, 2, 4 and 6 never pass
  through a halving and are exact.

## Interface and timing

```
afft8_beamformer #(IN_W = 16)
  input  clk, rst_n (asynchronous, active low), in_valid
  input  signed [IN_W-1:0]   v_re[8], v_im[8]        element samples v_0..v_7
  output out_valid
  output signed [IN_W+2:0]   beam_re[8], beam_im[8]  beams V_0..V_7
```

* **Latency.** `out_valid` and the beams follow the matching `in_valid` by
  exactly 4 clocks.
* **Throughput.** A new vector may enter on every clock. There is no
  back-pressure, because an ADC stream cannot be stalled.
* **Reset.** Reset clears only the valid bits. The data registers are free
  running and carry no reset.

The stage modules have the same port pattern: `x_re`/`x_im` in, `y_re`/`y_im`
out, and one clock of latency each. `afft_pkg` holds the element count, the
16-bit default width and the 3 bits of total growth.

The analog front end of each element is not part of this RTL: antenna, LNA,
90° I/Q split, anti-alias filters and ADC pair. The digital samples it
produces are the `v_re`/`v_im` ports.

## Verification

Each testbench is self-checking and prints a final
`TB_RESULT checks=N failures=M` line.

* **`tb_afft_stage1_b8` … `tb_afft_stage4_d2a1a3p`.** Each stage is compared
  against its factor matrix, written out entry by entry. For stage 4, the
  testbench forms the matrix product P·diag(I2,A1,A3)·D2 itself. Each stage
  testbench drives 4,000 random vectors with random gaps in `in_valid`, plus
  full-scale corners. Every clock, the output is checked against the vector
  from exactly one clock earlier.
* **`tb_afft8_beamformer` (end to end, default parameters).** The reference
  is the doubled integer matrix above. It knows nothing of the factorization.
  * Stimulus: impulses on each element, all 65,536 full-scale corner vectors,
    and 20,000 random vectors with gaps. A reset is applied in mid-burst.
  * Checks: the 4-clock latency on every clock, exact even beams, and odd
    beams within one LSB.
  * The testbench counts back-to-back vectors, gaps, halvings that dropped a
    bit, beams within 8 LSB of full scale, and a reset flush. It fails if any
    count is zero.
* **`tb_afft8_beam_patterns` (workload).** A unit plane wave from angle ψ
  reaches element n as `exp(jπ n sinψ)`, which is half-wavelength spacing at
  the top of the band. ψ is swept from -90° to +90° in 0.01° steps, and the
  testbench checks four things:
  * The strongest response of each beam lies within 0.05° of the DFT look
    directions: 0, 14.47, 30.00, 48.59, 90 (end-fire), -48.59, -30.00 and
    -14.47 degrees for beams 0…7.
  * At its own look direction, each beam is the strongest of the eight.
  * The normalized patterns of the even beams match the exact DFT.
  * The pattern difference D_i(ψ) of the odd beams integrates, in radians, to
    the value computed in double precision for F8^ itself: 4.21e-3 for beams
    1 and 7, and 2.83e-3 for beams 3 and 5. The largest D_i is 0.17.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/afft_pkg.sv \
    tb/tb_afft8_beamformer.sv --top-module tb_afft8_beamformer -Mdir obj -o sim
./obj/sim
```

Each testbench runs in well under a second.

## Where this RTL departs from, or goes beyond, the description

* **From the description:** the matrix, its factorization, the stage
  contents, the operation count (52 real additions, 4 shifts, 0 multipliers;
  coarse synthesis finds exactly 52 adder cells), the 16-bit input, and the
  fact that the datapath is pipelined.
* **This design's own choices:**
  * where the registers sit (one per adder level, 4 clocks of latency);
  * the word growth and the 19-bit beam width;
  * floor rather than rounding in the halvings;
  * folding the j rotations into stage 4's adders;
  * the valid-bit interface;
  * reset of the valid bits only.
* **Register count.** The FPGA prototype this structure comes from reported
  3064 slice registers. This RTL has 1152 flip-flop bits. That figure was
  measured on the FPGA, where input registers and test logic are likely part
  of the total. The register placement behind it is not known.
* **Test access.** The prototype took its inputs over a JTAG test link. No
  such port is modelled here. The parallel sample ports are what such a link
  would drive.
* **Published error figures.** The published error figures for F8^ do not
  follow from the matrix as written.
  * A mean squared error against the DFT of 0.686 was reported. The printed
    matrix gives 0.0214 per entry, or 1.37 summed.
  * An error energy of 1.08 per odd beam was reported. The patterns computed
    here give about 4e-3.
  * The pointing directions do agree.
  * The RTL follows the printed matrix and factorization, which reproduce
    each other exactly.
* **Real-only input.** A real-only input (v_im = 0) runs unchanged, but still
  uses all 52 adders. A dedicated real-input datapath, described as needing
  26 additions, is not built.

## Changing it

* `IN_W` on the top sets the sample width. Every internal width follows from
  it, and the beams are `IN_W+3` bits.
* To round the halvings instead of flooring them, add one before the shift in
  `afft_stage2_b4a2d1`. The end-to-end testbench's one-LSB tolerance on odd
  beams still holds.
* To trade clock rate for latency, merge two stages by removing a register
  level. The stage modules are independent, so two stages can also be fused
  into one `always_comb`.
