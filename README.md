# Exact algebraic-integer 8×8 2-D DCT, row-parallel

This is synthesizable SystemVerilog for a streaming 8×8 two-dimensional DCT. The
transform is computed with no rounding error between its input and its final output
stage. A conventional DCT core multiplies by rounded cosines in both of its 1-D passes.
The rounding noise of the first pass then spreads into every coefficient of the second.
Here every intermediate value is an *algebraic integer*: a vector of ordinary integers
that stands for an irrational number over a fixed basis. The cosines the Arai DCT needs
are exact, sparse vectors with power-of-two entries. So both passes are made of adders
and wired shifts only, and they are exact. A single *final reconstruction step* (FRS)
turns each of the 64 results back into a fixed-point number. That is the only place
where an approximation is made, and it is made separately for each output port. Its
error therefore cannot leak from one coefficient into another.

The architecture follows A. Madanayake, R. J. Cintra, D. Onen, V. S. Dimitrov,
N. T. Rajapaksha, L. T. Bruton and A. Edirisuriya, *A Row-parallel 8×8 2-D DCT
Architecture Using Algebraic Integer Based Exact Computation*. The RTL, the choices it
makes where that description stops, and the testbenches are this implementation's own.
The section "What follows the paper and what does not" lists them.

## 1. The number system

Let

    z1 = sqrt(2+sqrt2) + sqrt(2-sqrt2) = 2.6131259...
    z2 = sqrt(2+sqrt2) - sqrt(2-sqrt2) = 1.0823922...

A value is held as four integers (a, b, c, d), meaning `a + b·z1 + c·z2 + d·z1·z2`.
These are the *channels* a, b, c and d. Multiplied by 4, the four constants of the Arai
DCT are exact:

| constant (cn = cos(nπ/16)) | ×4 equals | channels (a b c d) |
|---|---|---|
| c4 | z1·z2 | 0 0 0 1 |
| c6 | z1 − z2 | 0 1 −1 0 |
| c2 − c6 | 2·z2 | 0 0 2 0 |
| c2 + c6 | 2·z1 | 0 2 0 0 |

Multiplying an integer by one of these constants moves it into another channel, maybe
shifted by one bit. No multiplier is needed and nothing is rounded. Pixels are integers,
so they are already encoded: they sit in channel a.

A 1-D transform of encoded data is linear. Transforming the rows of a matrix whose
entries are channel-q integers therefore gives, for each output, channel-p integers that
belong to the q part. So after both passes every coefficient is *doubly encoded*: up to
16 integers x[p][q], and its value is `Σ x[p][q]·z_p·z_q`.

## 2. Dataflow

    pixels (Fs) ──► ai_decimator ──row of 8, enable at Fs/8──► ai_dct2d_core
                                                                │
        ai_arai_dct8 (column pass: transforms each image row, 22 channels)
                                                                │
        ai_transpose_buffer (22 skewed delay lines, 176 taps)
                                                                │
        4 × ai_row_dct_block (one per channel q: 8 muxes + ai_arai_dct8)
                                                                │   88 doubly encoded channels
        ai_frs (8 units, Dempster-Macleod or expansion factor)
                                                                │
                                      8 coefficients per enabled clock

One image row goes in per enabled clock, and one column of 8 coefficients comes out per
enabled clock. A block takes 8 enabled clocks, which is 64 pixel clocks. Everything
after the decimator advances only on the decimator's strobe, so the core works at
Fclock = Fs/8 while the design has a single clock.

## 3. The 1-D AI Arai transform (`ai_arai_dct8`)

This is the standard Arai flow graph with its four constant products replaced by the
channel moves above. With t0..t7 the first butterfly (`t0 = x0+x7`, `t7 = x0−x7`, …),
the even part (e10, e11, e12, e13) and the odd part (o10 = t4+t5, o11 = t5+t6,
o12 = t6+t7), the outputs are:

| output | a | b | c | d |
|---|---|---|---|---|
| X0 | e10+e11 | – | – | – |
| X4 | e10−e11 | – | – | – |
| X2 | 4·e13 | – | – | e12+e13 |
| X6 | 4·e13 | – | – | −(e12+e13) |
| X1 | 4·t7 | o10+o12 | o12−o10 | o11 |
| X3 | 4·t7 | o12−o10 | −(o10+o12) | −o11 |
| X5 | 4·t7 | o10−o12 | o10+o12 | −o11 |
| X7 | 4·t7 | −(o10+o12) | o10−o12 | o11 |

That is 22 channels. The 10 marked "–" never exist, so they carry no wires or
registers. Decoded, output k equals `g_k · s_k · Σ_n x_n cos((2n+1)kπ/16)`, where:

- `s_0 = 1` and `s_k = 2cos(kπ/16)`. This is the usual per-coefficient scaling of the
  Arai algorithm. It is normally folded into the quantiser.
- `g_k = 4` for k ∉ {0, 4}, and `g_0 = g_4 = 1`. This is the factor 4 of the encoded
  constants.

The output is registered, so the latency is 1 enabled clock. The output width is the
input width + 5 bits: each channel is at most 4·Σ|x|, so nothing can overflow.

## 4. Transposing in real time (`ai_transpose_buffer`, `ai_row_dct_block`)

This is the least obvious part of the design. The column pass emits the 8 frequencies
of one image row per clock. The row pass needs, for one frequency at a time, that
frequency from all 8 rows of the block. Each present channel (i, q) has its own delay
line, so there are 22 lines. Line i first delays by i clocks and then by 7 more. Its
taps are

    taps[i][q][j] = X_i^(q) delayed by i + j enabled clocks,   j = 0..7

Suppose row r of a block was taken at enabled edge E+r. The column result is then
registered at E+r+1. At the clock following edge E+7+m, line m holds rows 7, 6, …, 0 of
frequency m on taps 0..7. The skew i makes each frequency line up one clock after the
previous one. So the row pass sees frequency 0, 1, …, 7 on 8 consecutive clocks, while
the next block already streams in behind it. No memory is addressed and nothing is
double-buffered.

Each `ai_row_dct_block` (one per channel q, four in total) has 8 multiplexers. Input j
of its DCT takes `taps[sel][7-j]`, that is, row j of frequency sel. sel is a 3-bit
counter of the input rows, so sel = m exactly when frequency m lines up. Together these
are 32 8:1 multiplexers. Their outputs y[u][p] are the p-channels of the q-part of
coefficient (vertical u, horizontal sel). The core regroups them as `x[u][p][q]` for the
FRS. Port u carries only the channels p that X_u has, so 88 of the 128 wires are ever
non-zero.

## 5. Final reconstruction (`ai_frs`)

There is one unit per output port, 8 in all. Each reads the 16 integers of its
coefficient and produces a two's-complement number. The parameter `KIND` selects one of
two methods.

### Dempster-Macleod (`FRS_DM`, `frs_dm_unit`, `frs_dm_mult`)

There are ten distinct products z_p·z_q. Each is replaced by a 12-bit approximation:

| product | exact | used |
|---|---|---|
| 1 | 1 | 1 |
| z1 | 2.6131259 | 669/2^8 |
| z2 | 1.0823922 | 2217/2^11 |
| z1z2 | 2.8284271 | 181/2^6 |
| z1² | 6.8284271 | 437/2^6 |
| z2² | 1.1715729 | 2399/2^11 |
| z1²z2 | 7.3910363 | 473/2^6 |
| z1z2² | 3.0614675 | 3135/2^10 |
| z1²z2² | 8 | 8 |

Each integer constant is a shift-add chain. For example, 669·x = −v1 − 32·v2 with
v1 = 3x and v2 = v1 − 8·v1. The header of `frs_dm_mult.sv` lists all of them. Every
chain has an input register plus three stages, so all 16 products arrive together. The
2^-n scalings are kept exact by carrying 11 fraction bits, so the 12-bit constants are
the only source of error. The four products of each column channel q are added in two
registered levels. A last registered adder sums the four channels. The output has 11
fraction bits and the latency is 7.

### Expansion factor (`FRS_EF_437` — the default — and `FRS_EF_12`, `frs_ef_unit`)

Products of basis elements fold back onto the basis exactly:

    z1² = 4 + z1z2    z2² = 4 − z1z2    z1²z2 = 2(z1+z2)    z1z2² = 2(z1−z2)    z1²z2² = 8

A block of adders therefore reduces the 16 integers, without error, to four integers
(Ya, Yb, Yc, Yd) with X = Ya + Yb·z1 + Yc·z2 + Yd·z1z2:

    Ya = x_aa + 4(x_bb + x_cc) + 8 x_dd
    Yb = x_ab + x_ba + 2(x_db + x_dc + x_bd + x_cd)
    Yc = x_ac + x_ca + 2(x_db − x_dc + x_bd − x_cd)
    Yd = x_ad + x_da + x_bb + x_bc + x_cb − x_cc

The irrational part is then removed by scaling by a factor α for which α·z1, α·z2 and
α·z1z2 are almost integers:

| KIND | α (shift-add code) | α·{z1, z2, z1z2} ≈ | fraction bits |
|---|---|---|---|
| `FRS_EF_437` | 2^7+2^5+2^3−2^0+2^-2−2^-6−2^-8 = 167.23047 | {437, 181, 473} | 8 |
| `FRS_EF_12` | 2^2+2^-1+2^-4+2^-5+2^-9 = 4.59570 | {12, 5, 13} | 9 |

The unit outputs `α·Ya + m1·Yb + m2·Yc + m3·Yd`. It uses the shared sub-sums
`473(b+c+d) − 36(b+c) − 256c` or `8(b+d) + 4(b+c+d) + d + c`. **The output is α·X, not
X.** The 1/α is meant to be folded into the next stage, usually the quantiser. The
latency is 4.

### Accuracy

`tb_workload_designs` runs all six combinations of the FRS method and the pixel width
(4 or 8 bits) on 500 random blocks. It prints the share of coefficients within a
relative tolerance of the exact, floating-point scaled DCT. One run gave:

| design | FRS | pixel bits | ≤10 % | ≤1 % | ≤0.1 % | ≤0.01 % |
|---|---|---|---|---|---|---|
| 1 | Dempster-Macleod | 4 | 99.84 | 99.00 | 92.06 | 55.98 |
| 2 | Dempster-Macleod | 8 | 99.93 | 99.19 | 91.87 | 56.19 |
| 3 | α′ {12,5,13} | 4 | 98.37 | 87.05 | 49.39 | 20.60 |
| 4 | α′ {12,5,13} | 8 | 98.33 | 86.89 | 49.37 | 20.85 |
| 5 | α* {437,181,473} | 4 | 99.94 | 99.76 | 98.25 | 86.40 |
| 6 | α* {437,181,473} | 8 | 99.99 | 99.80 | 98.23 | 86.07 |

The ranking matches the measurements in the paper: α* is best, then Dempster-Macleod,
then α′. The paper reports, at 0.1 %, 99.0–99.1, 96.3 and 55.1 (%). The absolute
numbers depend on the test data, which differs.

## 6. Using the top level

`ai_dct2d_top #(L = 8, KIND = FRS_EF_437)`:

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | pixel clock Fs; asynchronous active-low reset |
| `pix_valid`, `pix[L-1:0]` | in | unsigned pixel, raster order within blocked rows |
| `out_stb` | out | one clock per output row |
| `out_hfreq[2:0]` | out | horizontal frequency h of this output row |
| `out_coef[8]` | out | signed; `out_coef[v]` is the coefficient (vertical v, horizontal h) |

- **Input order.** The image must already be cut into 8×8 blocks and the blocks stacked,
  so that each block is 8 consecutive rows of 8 pixels. The first valid pixel after
  reset is pixel (row 0, column 0) of a block. After that, blocks follow back to back.
  `pix_valid` may drop at any time: the whole pipeline then waits.
- **Output.** Each block gives 8 strobes, with h = 0..7 in order.

  `out_coef[v] = A · g_v·g_h · s_v·s_h · Σ_r Σ_c x[r][c]·cos((2r+1)vπ/16)·cos((2c+1)hπ/16)`

  up to the FRS error. A = 2^11 for `FRS_DM`. A = α·2^8 for `FRS_EF_437` and α·2^9 for
  `FRS_EF_12`. To get JPEG-style DCT values, divide by A·g_v·g_h·s_v·s_h and multiply
  by C(v)·C(h)/4. Normally the quantiser table absorbs all of these factors.
- **Timing.** With a continuous stream, `out_stb` for h = 0 of the first block comes 105
  clocks after its pixel 0 has been presented. That is the 8-pixel decimator, 12
  enabled clocks of 8 pixel clocks each, and one clock for the strobe. After that there
  is one output row every 8 clocks and one block every 64 clocks.
- **Widths.** The output is L+11+25 = 44 bits (expansion factor) or L+11+19 = 38 bits
  (Dempster-Macleod) for L = 8. Internally, the column pass is L+6 bits and the row
  pass L+11 bits. These are worst-case bounds, so no stage can overflow.

`ai_dct2d_core` can be used without the decimator. It takes one row (`x_row[8]`) per
clock when `ce` is high. `in_valid` marks real rows: a block is reported only if all of
its rows were valid. Its latency is row 0 at enabled edge E, giving h = 0 at enabled
edge E + 8 + FRS latency.

## 7. What follows the paper and what does not

These follow the paper:

- the AI basis and the constant encodings;
- the column pass, the skewed 22-line transpose buffer (176 taps), the 32 multiplexers
  and the four parallel row cores;
- 88 channels into 8 FRS units;
- both FRS methods, with their constants, shift-add chains, shared sub-sums and α codes;
- the Dempster-Macleod per-channel pipeline;
- the delay-and-downsample input section.

These are this implementation's choices:

- **Butterfly wiring.** The drawing of the 1-D AI block in the paper shows `<<1` shifts
  on two paths. The wiring drawn there could not be followed reliably. The RTL instead
  implements the Arai flow graph exactly with the ×4 encodings, which needs a `<<2` on
  the a-channel of outputs 1, 2, 3, 5, 6 and 7. Any exact variant differs only in the
  per-output scale g_k. The testbenches check the decoded values, not a particular
  wiring.
- **Decimator.** It emits an enable strobe instead of a divided clock. `pix_valid`
  pauses and the tap order (row[i] is pixel i) are also this design's. The paper's
  drawing labels the undelayed tap x_0.
- **Valid handling and sizes.** The reset values, in_valid/out_stb tagging, register
  placement in the expansion-factor FRS and the final adder of the Dempster-Macleod
  FRS are this design's, as are all bit widths.
- **Unsigned pixels.** To transform level-shifted (signed) data, use `ai_dct2d_core`
  with your own sign handling, or widen L.
- **Precision per coefficient.** The architecture allows the precision of every
  coefficient to be chosen independently, since each has its own FRS arithmetic. This
  RTL delivers every coefficient at the full FRS precision, and a consumer may drop low
  bits per coefficient. The FRS constants themselves are the same for all ports.
- **Output orientation.** Each output row holds one horizontal frequency with all 8
  vertical frequencies. This is the transpose of the usual raster order of the
  coefficient matrix. Reorder it downstream if needed.
- **Parts not included.** The serial-link deserialiser in front of the input, and the
  JTAG-based board test harness used for measurement, are not part of this RTL.
- **The α′ value.** The paper quotes α′ once as 4.5941 and elsewhere as 4.5961. The RTL
  uses the shift-add code given for it, which is 4.59570.

## 8. Files

| file | contents |
|---|---|
| `rtl/ai_dct_pkg.sv` | channel enum, channel table `CH_MASK`, FRS kinds, latencies, widths |
| `rtl/ai_decimator.sv` | pixel stream to rows, Fs/8 enable |
| `rtl/ai_arai_dct8.sv` | exact 1-D AI Arai DCT |
| `rtl/ai_transpose_buffer.sv` | skewed delay lines |
| `rtl/ai_row_dct_block.sv` | 8 multiplexers + 1-D AI DCT for one channel |
| `rtl/frs_dm_mult.sv` | pipelined shift-add constant multiplier |
| `rtl/frs_dm_unit.sv` | Dempster-Macleod reconstruction, one port |
| `rtl/frs_ef_unit.sv` | expansion-factor reconstruction, one port |
| `rtl/ai_frs.sv` | 8 reconstruction units |
| `rtl/ai_dct2d_core.sv` | the 2-D transform at one row per enabled clock |
| `rtl/ai_dct2d_top.sv` | decimator + core |
| `tb/tb_ref_pkg.sv` | floating-point reference: exact basis, cosine sums, scalings |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_workload_designs.sv`, `tb/wl_design_meter.sv` | accuracy of the six FRS/width combinations |

## 9. Verification and simulation

Every testbench compares against values computed independently, in floating point, from
the definitions: the exact basis values and cosine sums.

- The 1-D block, the row block and the core (through a hierarchical probe at the FRS
  input) are checked to be exact. The decoded integers must equal the scaled DCT to
  within floating-point rounding.
- The FRS units are checked bit for bit against plain-multiplication references, and
  for their approximation error.
- The core and top testbenches also check ordering, latency and throughput. They
  exercise input pauses, back-to-back blocks, a block with an invalid row, and all eight
  multiplexer codes.
- `tb_ai_dct2d_top` runs the top at its default parameters.

Each testbench prints `TB_RESULT checks=N failures=M`. Example with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/ai_dct_pkg.sv tb/tb_ref_pkg.sv tb/tb_ai_dct2d_top.sv \
        --top-module tb_ai_dct2d_top -o sim
    ./obj_dir/sim

Use the same command for any other testbench by replacing the file and top-module name.
`tb_workload_designs` also needs `tb/wl_design_meter.sv`, which `-y tb` finds.
