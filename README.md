# Pruned 8-point DCT approximations in hardware

In block-based image coding almost all of the energy of an 8x8 block ends up
in its low-frequency DCT coefficients, and the quantizer throws most of the
rest away. A *pruned* transform exploits that by never computing the
high-frequency outputs at all. This RTL implements two such pruned transforms,
each built on a multiplierless DCT approximation, as fully pipelined 1-D
engines that take one 8-point vector per clock:

| engine | approximation | kept outputs | adders | shifts | file |
|---|---|---|---|---|---|
| pruned LODCT | Lengwehasatit-Ortega, W<4> | X0..X3 | 18 | 1 | `rtl/pruned_lodct_1d.sv` |
| pruned MRDCT | modified rounded DCT, M<6> | X0..X5 | 12 | 0 | `rtl/pruned_mrdct_1d.sv` |

`rtl/pruned_dct_top.sv` places both engines on one input stream, so each
vector produces both sets of coefficients three clocks later.

## The two transforms

An approximate DCT is written as C ≈ S·T, where T has entries from
{0, ±1/2, ±1} and S is a diagonal scaling. S costs nothing in a codec because
it is folded into the quantization step, so the hardware computes only T·x.
Pruning keeps the first K rows of T.

Pruned LODCT, K = 4:

```
W<4> = [ 1   1    1    1   1   1    1    1 ]     S<4> = diag(1/sqrt8, 1/sqrt2, 1/2, 1/sqrt2)
       [ 1   1    1    0   0  -1   -1   -1 ]
       [ 1  1/2 -1/2  -1  -1 -1/2  1/2   1 ]
       [ 1   0   -1   -1   1   1    0   -1 ]
```

Pruned MRDCT, K = 6:

```
M<6> = [ 1  1  1  1  1  1  1  1 ]     D<6> = diag(1/sqrt8, 1/sqrt2, 1/2, 1/sqrt2, 1/sqrt8, 1/sqrt2)
       [ 1  0  0  0  0  0  0 -1 ]
       [ 1  0  0 -1 -1  0  0  1 ]
       [ 0  0 -1  0  0  1  0  0 ]
       [ 1 -1 -1  1  1 -1 -1  1 ]
       [ 0 -1  0  0  0  0  1  0 ]
```

The outputs of both engines are the unscaled products W<4>·x and M<6>·x.

## Pipeline structure

Both engines have three register stages. Stage 1 is the usual even/odd
butterfly; the even half is reduced further in stages 2 and 3, while the odd
half needs little or no work.

Pruned LODCT (with a_i = x_i + x_(7-i), b_i = x_i - x_(7-i), i = 0..3):

| stage | operations | adders |
|---|---|---|
| 1 | a0..a3, b0..b3 | 8 |
| 2 | c0 = a0+a3, c1 = a1+a2, c2 = a0-a3, c3 = a1-a2, t1 = b1+b2, t3 = b0-b3 | 6 |
| 3 | X0 = c0+c1, X2 = c2 + (c3>>>1), X1 = t1+b0, X3 = t3-b2 | 4 |

Pruned MRDCT:

| stage | operations | adders |
|---|---|---|
| 1 | a0..a3, X1 = x0-x7, X3 = x5-x2, X5 = x6-x1 | 7 |
| 2 | e0 = a0+a3, e1 = a1+a2, X2 = a0-a3 | 3 |
| 3 | X0 = e0+e1, X4 = e0-e1 | 2 |

The MRDCT needs only the four butterfly sums plus three differences; b3 is
never formed. X1, X3 and X5 are finished after stage 1 and are only delayed
after that.

### Delay balancing

The published block diagrams of both engines show some values skipping a
register column: in the LODCT, the last adders of X1 and X3 take one operand
from stage 1 and one from stage 2; in the MRDCT, X1, X3 and X5 pass through
two registers where the other outputs pass through three. Streaming a new
vector every clock through such a structure would mix neighbouring vectors.
This RTL adds the missing registers (b0 and b2 in the LODCT, the three
differences in the MRDCT), so that all coefficients of a vector leave
together. This costs 2·(IN_W+1) and 3·(IN_W+1) flip-flops and does not change
the adder count.

## Arithmetic

All values are two's complement and exact; nothing saturates. Every stage
adds one bit, so the outputs are IN_W + 3 bits wide, enough for a sum of
eight full-scale inputs.

The one place that is not exact is the 1/2 in row 2 of W<4>. It is realised
as an arithmetic right shift of c3 before the final addition, which drops one
fraction bit. So

```
X2 = c2 + floor(c3 / 2) = floor((2*x0 + x1 - x2 - 2*x3 - 2*x4 - x5 + x6 + 2*x7) / 2)
```

rounding towards minus infinity. When c3 is odd, X2 is half a unit below the
true value of W<4>·x.

## Interface and timing

All three modules share the same handshake:

| port | width | meaning |
|---|---|---|
| `clk` | 1 | clock; everything acts on the rising edge |
| `rst_n` | 1 | synchronous, active low; clears the valid pipeline only |
| `in_valid` | 1 | `x` holds a vector to transform |
| `x[0:7]` | IN_W each | input samples, signed |
| `out_valid` | 1 | outputs hold the result of the vector that entered 3 clocks earlier |
| `X[0:K-1]` (cores), `lodct_X[0:3]`, `mrdct_X[0:5]` (top) | IN_W+3 each | coefficients, signed, in natural order X0, X1, ... |

Throughput is one vector per clock with no stalls; there is no back-pressure.
Data registers are not reset, so outputs are undefined while `out_valid` is
low. A reset discards any vectors in flight. The top asserts that its two
cores always agree on `out_valid`.

`IN_W` defaults to 11. That lets one engine perform both passes of a 2-D
transform of level-shifted 8-bit pixels: the column pass takes -128..127, and
its results, at most 8·128 in magnitude, still fit 11 bits as inputs of the
row pass.

## Using the engines for a 2-D transform

The pruned 2-D transform of an 8x8 block A is B = T<K>·A·T<K>ᵀ, a K x K
block. It takes eight 1-D calls on the columns of A, which give a K x 8
intermediate, and then K calls on the rows of that intermediate. That is
12 vectors per block for W<4> and 14 for M<6>, or (8 + K) times the 1-D adder
count: 216 additions and 12 shifts per block for W<4>, 168 additions for M<6>.
With both engines behind one input, 8 + 4 + 6 = 18 vectors per block produce
both results.

The transpose store between the passes, the scaling/quantization and the
inverse transform (which multiplies by the transposed pruned matrix) are not
part of this RTL. In the LODCT's 2-D use the floor in X2 is applied after
each pass.

## What follows the published design and what does not

Taken from the published design: the two matrices, the adder and shift counts
(18 + 1 shift, 12), the split of adders over three register stages
(8/6/4 and 7/3/2), the position of the shift in front of the last X2 adder.

Chosen here, because the published description does not fix them:

- the word length (`IN_W` = 11) and the output width rule (IN_W + 3);
- the pairing of odd terms in the LODCT's stage 2 (t1 = b1 + b2,
  t3 = b0 - b3), which cannot be read from the drawing;
- the signs of the MRDCT's stage-1 differences, formed so that no negation is
  needed at the output;
- the delay-balancing registers described above;
- the valid flags, the reset of the valid pipeline only, and the shared input
  port of the top.

The published prototype put both engines on a Virtex-5 FPGA of a multi-FPGA
board and drove them from a host over USB; that board and link are not
modelled here. For reference, that prototype reported about 279 MHz for both
engines.

## Verification

Each testbench checks against integer matrix products written out from the
matrices above, independent of the RTL's factorisation, and checks the
3-clock latency of every vector.

| testbench | what it runs |
|---|---|
| `tb/tb_pruned_lodct_1d.sv` | 4,000 random vectors with random idle cycles, plus full-scale and odd-shift corner vectors |
| `tb/tb_pruned_mrdct_1d.sv` | the same stimulus against M<6> |
| `tb/tb_pruned_dct_top.sv` | 10,000 random vectors at the top's default parameters plus corners; a reset with vectors in flight; checks the two DC outputs agree; counts back-to-back vectors, idle gaps, flushed vectors, shifts that truncate positive and negative odd values, and full-scale results, and fails if any never happens |
| `tb/tb_pruned_2d_blocks.sv` | 2-D transforms of 64 8x8 blocks (gradients, flat, edges, noise) through the top, transpose in the testbench, compared with a direct 2-D reference |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl \
  rtl/pruned_dct_pkg.sv rtl/pruned_lodct_1d.sv rtl/pruned_mrdct_1d.sv \
  rtl/pruned_dct_top.sv tb/tb_pruned_dct_top.sv \
  --top-module tb_pruned_dct_top -Mdir obj
./obj/Vtb_pruned_dct_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## Files

- `rtl/pruned_dct_pkg.sv`: constants shared by all modules (N, K values, latency, word growth)
- `rtl/pruned_lodct_1d.sv`: pruned LODCT engine
- `rtl/pruned_mrdct_1d.sv`: pruned MRDCT engine
- `rtl/pruned_dct_top.sv`: both engines on one input stream
- `tb/`: the testbenches above
