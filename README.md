# T1: a multiplierless 8-point DCT approximation, with 16- and 32-point extensions

Image and video coders spend much of their arithmetic on the discrete cosine
transform (DCT). The exact 8-point DCT needs irrational multipliers. This
design instead computes a low-complexity matrix, **T1**, whose entries are only
0, ±1 and ±2. Each row of T1 was picked, from all vectors with such entries,
to make the smallest angle with the matching row of the exact DCT, so the
rows point almost the same way as the DCT basis vectors. The rows of T1 are
mutually orthogonal but have different lengths. A diagonal matrix fixes this:

    C1 = S1 · T1,   S1 = diag(1/√8, 1/√18, 1/√20, 1/√18, 1/√8, 1/√18, 1/√20, 1/√18)

C1 is an orthogonal DCT approximation. S1 is a per-coefficient constant, so a
codec folds it into its quantizer step sizes. The hardware therefore computes
only the integer product **X = T1·x**, using additions and shifts by one.

```
        n:  0   1   2   3   4   5   6   7
T1 = [  1   1   1   1   1   1   1   1 ]   X0
     [  2   2   1   0   0  -1  -2  -2 ]   X1
     [  2   1  -1  -2  -2  -1   1   2 ]   X2
     [  1   0  -2  -2   2   2   0  -1 ]   X3
     [  1  -1  -1   1   1  -1  -1   1 ]   X4
     [  2  -2   0   1  -1   0   2  -2 ]   X5
     [  1  -2   2  -1  -1   2  -2   1 ]   X6
     [  0  -1   2  -2   2  -2   1   0 ]   X7
```

Done naively, T1 costs 48 additions. A sparse factorization cuts this to
**24 additions and 6 shifts by one**. The 8-point core is built on that
factorization. The same core, doubled twice by a standard butterfly
construction, gives 16- and 32-point transforms for a video coder's larger
blocks.

## The 8-point datapath (`dct8_t1`)

The factorization is T1 = D·A4·A3·A2·A1:

- A1, A2 and A3 are butterflies.
- A4 is sparse, with some entries equal to ½.
- D = diag(1,2,1,2,1,2,1,2).

D·A4 has only the entries ±1 and ±2, so the hardware computes it directly.
The datapath has five adder rows, with a register row after each one:

| row | adders | computes |
|-----|--------|----------|
| 1 (A1) | 8 | a_n = x_n + x_{7−n}, a_{7−n} = x_n − x_{7−n}, n = 0..3 |
| 2 (A2) | 4 | b0 = a0+a3, b1 = a1+a2, b2 = a1−a2, b3 = a0−a3; b4..b7 = a4..a7 |
| 3 (A3) | 2 (+6 shifters) | w0 = b0+b1, w1 = b0−b1; lanes 2..7 are kept both as w_n and as 2·w_n |
| 4 | 6 | X2 = w2 + 2w3, X6 = w3 − 2w2, and one partial sum for each odd output |
| 5 | 4 | X1 = (w5 + 2w6) + 2w7 <br> X3 = (w7 − 2w4) − 2w5 <br> X5 = (w4 − 2w6) + 2w7 <br> X7 = (2w5 − 2w4) − w6 |

Other facts about the datapath:

- X0 = w0 and X4 = w1 pass through rows 4 and 5 in registers.
- Only six shifts are needed, because rows 4 and 5 share the doubled copies
  of lanes 2..7.
- Every adder has at most one negated input.
- Row 4 keeps 11 registers: six partial results, X0, X4, 2w7, 2w5 and w6.

The per-row adder counts (8, 4, 2, 6, 4), the six shifters and the five
register rows match the published architecture drawing. That drawing cannot
be read reliably enough to recover its exact wiring. So how rows 4 and 5
group the terms of D·A4 is this design's own choice. Any grouping gives the
same outputs.

**Word widths.** The words keep full precision, so nothing can overflow:

- Rows 1 to 3 add one bit each: W+1, W+2 and W+3 bits.
- Rows 4 and 5 are W+4 bits wide.
- The largest absolute row sum of T1 is 10, so an output never exceeds
  10·2^(W−1) in magnitude.

With the default W = 8, the core has 24 adders and 446 flip-flop bits. The
published FPGA realisation reports 408 flip-flops, with no word length stated.
The difference is most likely in word widths, which are not documented.

**Timing.** The core takes one vector per clock. Its latency is 5 clocks, and
it never stalls.

## Doubling the length: 16 and 32 points (`jam_butterfly`, `dct16_t1`, `dct32_t1`)

The Jridi–Alfalou–Meher construction builds an N-point transform from two
N/2-point transforms:

1. A butterfly of N adders forms the sum half u_i = x_i + x_{N−1−i} and the
   difference half v_i = x_i − x_{N−1−i}, for i = 0..N/2−1.
2. One N/2-point transform processes u, and the other processes v.
3. The outputs are interleaved. X_{2k} is output k of the u transform, and
   X_{2k+1} is output k of the v transform.

`dct16_t1` applies this to two `dct8_t1` cores. `dct32_t1` applies it to two
`dct16_t1` units. The costs are 64 additions and 12 shifts for 16 points, and
160 additions and 24 shifts for 32 points. A factor of 1/√2 per doubling, and
the matching diagonal scaling, are again left to the quantizer. The butterfly
has a register row after it, so each doubling adds one clock of latency and
one bit of width.

**The difference half's sign convention.** The general formula for this construction orders the difference half
differently: x_{N/2−1−i} − x_{N/2+i}. That order reverses v, so every
antisymmetric row of the smaller transform changes sign. Several rows of the
16- and 32-point matrices change sign as a result. For example, row 3 of the
16-point matrix becomes [−2 −2 −1 0 0 1 2 2 −2 −2 −1 0 0 1 2 2].

This design uses the order v_i = x_i − x_{N−1−i}. That order reproduces the
published 16- and 32-point matrices entry for entry, and the testbenches check
this against rows copied from them. For coding, a row sign does not matter,
because quantization is symmetric. For bit-exact comparisons, it does.

## Interfaces and timing

Every block uses the same signals:

- `clk`: all registers update on its rising edge.
- `rst_n`: asynchronous, active low. It clears every register, so a reset
  drops any vectors in flight.
- `in_valid` and `out_valid`: a valid bit travels alongside the data through
  the pipeline. There is no back-pressure.

Samples are signed two's complement. Outputs are the unscaled integer
coefficients, in natural order X0..X(N−1).

| module | input | output | latency | throughput |
|--------|-------|--------|---------|------------|
| `dct8_t1 #(W)` | `x[8]`, W bits | `X[8]`, W+4 bits | 5 | 1 vector / clock |
| `jam_butterfly #(N, W)` | `x[N]`, W bits | `u[N/2]`, `v[N/2]`, W+1 bits | 1 | 1 vector / clock |
| `dct16_t1 #(W)` | `x[16]`, W bits | `X[16]`, W+5 bits | 6 | 1 vector / clock |
| `dct32_t1 #(W)` | `x[32]`, W bits | `X[32]`, W+6 bits | 7 | 1 vector / clock |
| `t1_dct_top #(W)` | all three sets of ports above | | 5 / 6 / 7 | independent |

`t1_dct_top` places the 8-, 16- and 32-point pipelines side by side. Each has
its own valid, input and output ports. That is the set of transforms that
replaces a video coder's 8-, 16- and 32-point transforms. How an encoder
would share or schedule them is outside this design.

`t1_dct_pkg` holds the latencies, the width growth and the matrix T1. The
testbenches use T1 as their reference.

## Using the cores for 2-D transforms

A 2-D block transform B = T·A·Tᵀ takes two passes: one over the rows and one
over the columns. This design contains one 1-D pass. A complete 2-D unit
needs the following:

- **Two instances.** The first pass takes W-bit samples and produces W+4-bit
  results for 8 points. The second pass needs an instance with a W that wide,
  for example `dct8_t1 #(.W(12))` after an 8-bit first pass.
- **A transpose buffer** between the passes. It is not included.
  `tb_image_codec` does the transpose in the testbench.
- **The right input width.**
  - 8-bit pictures, level-shifted by −128 as in JPEG, fit the default W = 8.
  - Prediction residuals of 8-bit video range over −255..255. They need
    W = 9.
- **Scaling and quantization.** For the orthogonal C1 the scaling is
  S·B·S, which is s_k·s_l per coefficient. It belongs in the quantizer.

The 4-point transform of a video coder is not part of this design.

## Verification

Each testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_dct8_t1` | 4,000 random vectors with idle gaps, plus per-row worst-case vectors, against the matrix product T1·x. Checks the 5-cycle latency, and that a reset in mid-stream drops what is in flight. |
| `tb_jam_butterfly` | N = 16 and N = 32 butterflies against their formulas, every cycle. |
| `tb_dct16_t1`, `tb_dct32_t1` | Random and worst-case vectors against the 16- and 32-point matrices. The testbench builds these matrices from T1 by the doubling rule, and first checks the rule against rows copied from the published matrices. |
| `tb_t1_dct_top` | All three pipelines at once, at their default sizes. The 8-point pipeline gets 100,000 random vectors, the count used to test the FPGA realisation. Counts back-to-back vectors, idle gaps, outputs that need the full word width, and resets that drop vectors in flight. Fails if any count is zero. |
| `tb_image_codec` | A JPEG-like experiment on a generated 512×512 8-bit image; see below. |
| `tb_video_residual` | 2-D transforms of 8×8, 16×16 and 32×32 video residual blocks (−255..255, so W = 9 in the first pass) through pairs of 8-, 16- and 32-point pipelines. The result must equal T·A·Tᵀ exactly. T·Tᵀ must equal the predicted diagonal D_(N). The orthogonal inverse must give the residual back. |

`tb_image_codec` works as follows:

1. Every 8×8 block goes through two `dct8_t1` instances, with the transpose
   done in the testbench.
2. The result must equal T1·A·T1ᵀ exactly.
3. Keeping the first r zig-zag coefficients after scaling, the reconstruction
   error must never grow as r grows.
4. r = 64 must give back the exact image.

The testbench also prints the PSNR for several values of r. These numbers
describe the generated image, so they cannot be compared with the published
results on photographs.

The reference model is a plain matrix–vector product (`tb/tb_ref_pkg.sv`). It
shares nothing with the factorized datapath.

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/t1_dct_pkg.sv tb/tb_ref_pkg.sv rtl/dct8_t1.sv rtl/jam_butterfly.sv \
  rtl/dct16_t1.sv rtl/dct32_t1.sv rtl/t1_dct_top.sv tb/tb_t1_dct_top.sv \
  --top-module tb_t1_dct_top -Mdir obj && ./obj/Vtb_t1_dct_top
```

The other testbenches build the same way with their own top module.
`tb_image_codec` needs only `t1_dct_pkg.sv` and `dct8_t1.sv`; `tb_video_residual` needs the same files as the end-to-end test, without `t1_dct_top.sv`. Every
simulation finishes in seconds.

## What follows the published design and what does not

**Taken from the published design:**

- The matrix T1, its factorization and its scaling S1.
- The 8-point datapath's adder rows, shifters and five register rows.
- The JAM doubling, and the resulting 16- and 32-point matrices and costs.

**This design's own choices**, none of which the published work states:

- The sample width W = 8 and signed inputs.
- Full-precision word growth.
- The valid bit, one vector per clock, and the asynchronous reset.
- The register row after each butterfly.
- How rows 4 and 5 group the terms of D·A4.
- Three separate pipelines in the top.

**Where the published text disagrees with itself:**

- One figure caption writes the 8-point output as x·T1, a row vector times
  the matrix. The factorization and the signal flow give T1·x, which is what
  is built.
- The general doubling formula and the printed 16- and 32-point matrices
  differ in row signs. The printed matrices are followed, as described above.

**Not included:**

- The diagonal scaling (S1, and the 1/√2 factors), which belongs in a codec's
  quantizer.
- The transpose memory of a 2-D transform.
- The rest of an encoder, including its 4-point transform.
- The JTAG co-simulation set-up that was used to test the FPGA realisation.
