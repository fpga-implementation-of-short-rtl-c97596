# A short-critical-path, multiplierless 8-point DCT from CORDIC microrotations

The 8-point DCT is the core of JPEG and MPEG coding. A 2-D 8x8 DCT is usually
done as 1-D transforms over the rows and then over the columns. Fast DCT
algorithms such as Loeffler's still need constant multiplications. In hardware
the speed of an adder-only version depends mostly on its *critical path*: the
number of adders that operate in cascade.

This RTL is a purely combinational circuit. It approximates the 8-point DCT
with **36 adders, 16 wired shifts and one row of NOT gates**. Its longest path
is **six adders plus one NOT gate**. It follows the design "FPGA implementation
of short critical path CORDIC-based approximation of the eight-point DCT"
(M. Vashkevich, M. Parfieniuk, A. Petrovsky), which builds on Parfieniuk's
"variant C" of a CORDIC-based DCT approximation. Two ideas make it work:

1. **The rotations become short CORDIC cascades.** Each of the three plane
   rotations of the Loeffler flow graph is replaced by two or three CORDIC
   microrotations (shift-and-add butterflies). The rotations by beta and gamma
   use the same set of shifts, so they share one scale factor. All scale factors
   are left out of the circuit; the quantizer that follows a DCT in a codec
   absorbs them into its table.
2. **One negation becomes a NOT gate.** The odd half needs to negate one
   intermediate value, which would cost a seventh adder on the critical path.
   Instead it is inverted bitwise (`~v = -v - 1`), and the missing `+1` goes into
   the carry input of adders that come later. One output, X5, is left one LSB
   high on purpose.

## Data formats

| item | format |
|---|---|
| input `x[0..7]` | signed two's complement, `IN_W` = 8 bits (level-shifted samples, -128..127) |
| output `X[0..7]` | signed, `W` = 12 bits, natural order X0..X7, **not scaled** (see below) |
| internal nodes | all `W` = 12 bits |
| shifts | arithmetic right shift: drops bits, rounding toward minus infinity; no guard bits |

The 8-bit input and 12-bit output are the published widths. The rest are choices
of this implementation. Over all signed 8-bit inputs, the largest magnitude any
node reaches is 1053 (at X3), so 12 bits never overflow. Unsigned
0..255 samples would need a zero-extending input stage, which is not provided.

## The flow graph, stage by stage

Stage numbers match the figure of the published final flow graph. Each stage
adds one adder delay, except stage 5, which adds the NOT as well.

```
stage 1   a[k] = x[k] + x[7-k],  a[7-k] = x[k] - x[7-k]          k = 0..3   (8 adders)

even half (lines 0..3)
stage 2   b0 = a0 + a3,  b3 = a0 - a3,  b1 = a1 + a2,  b2 = a1 - a2          (4)
stage 3   X0 = b0 + b1,  X4 = b0 - b1;  alpha microrotation i=1 on (b3, b2) (4)
stage 4   alpha microrotation i=4   -> (X2, X6)                              (2)

odd half (lines 4..7)
stage 2   beta  microrotation i=1 on (a7, a4),  gamma i=1 on (a6, a5)        (4)
stage 3   beta  i=2,                            gamma i=2                    (4)
stage 4   beta  i=4  -> (bu, bl),               gamma i=4 -> (gu, gl)        (4)
stage 5   X1 = bu + gu,    m2 = bu - gu,
          n6 = ~bl - gl,   X7 = gl + ~bl + 1                                 (4)
stage 6   X5 = m2 - n6,    X3 = m2 + n6 + 1                                  (2)
```

Total: 8 + 8 + 8 + 6 + 4 + 2 = 36 adders. Shifts: 2 per microrotation, 8
microrotations, so 16. Both counts match the published ones.

The longest path runs from an input through the stage-1 adder, the three beta
microrotations, the NOT row, n6, and the X3 adder. That is six adders and the
NOT. A longest-path search (`yosys ltp`) over the elaborated, flattened
word-level netlist confirms it. It reports one more step, the `+ 1` of X3,
which synthesis folds into the carry input of the last adder.

### CORDIC microrotations

One microrotation with shift `i` and direction `s` (+1 or -1) maps the upper
line `u` and the lower line `l` to

```
u' = u - s * (l >>> i)
l' = l + s * (u >>> i)
```

That is a rotation by `s*atan(2^-i)`, stretched by `sqrt(1 + 2^-2i)`. Both
results come from the old pair, so the two adders run side by side. The three
rotations of the Loeffler graph are approximated as follows:

| rotation | target angle | shifts i | signs s | angle realised | gain K |
|---|---|---|---|---|---|
| alpha (X2, X6) | -pi/8 = -0.393 | 1, 4 | -1, +1 | -0.401 rad | 1.1202 |
| beta (odd) | -pi/16 = -0.196 | 1, 2, 4 | -1, +1, +1 | -0.156 rad | 1.1559 |
| gamma (odd) | -3pi/16 = -0.589 | 1, 2, 4 | -1, -1, +1 | -0.646 rad | 1.1559 |

The beta and gamma angles are well off target. That is the price of giving the
two rotations one common |s| set, and hence one common gain. It is the reason
the odd outputs are the least accurate ones (see *Accuracy*).

### The merged negation (stages 5 and 6)

In the original graph the lower outputs of the beta and gamma rotations pass
through negating adders (`0 - v`). Merging one of them into the stage-6
butterfly removes one adder. The other one, `-bl`, is replaced by `~bl`, which
equals `-bl - 1`. Following the `-1` through the graph:

```
X7 = gl + ~bl + 1          = gl - bl                   exact (carry-in 1)
n6 = ~bl - gl              = -(bl + gl) - 1
X3 = m2 + n6 + 1           = (bu - gu) - (bl + gl)     exact (carry-in 1)
X5 = m2 - n6               = (bu - gu) + (bl + gl) + 1 one LSB high
```

The `+ 1` terms cost no hardware: an adder has a carry input anyway, and
synthesis merges the three operands into one carry-chain adder. X5 would need an
extra adder to correct, so it stays biased. A constant (DC) input therefore gives
`X5 = 1` instead of 0. A codec can subtract the 1 or simply ignore it.

## Output scale factors

Each output approximates a DCT coefficient `C_k = sum_n x[n] cos((2n+1)k pi/16)`
times a fixed gain:

| output | X0 | X1 | X2 | X3 | X4 | X5 | X6 | X7 |
|---|---|---|---|---|---|---|---|---|
| gain | 1 | K | Ka | sqrt2 K | sqrt2 | sqrt2 K | **-Ka** | K |

Here K = 1.1559 and Ka = 1.1202. X6 comes out negated because the Loeffler
graph's negation on that line is dropped too. The sign, like the magnitudes,
belongs in the quantization table. For an orthonormal DCT, multiply further by
`sqrt(1/8)` for X0 and `1/2` for the others.

## Accuracy

With 20,000 random signed 8-bit vectors, the error energy of each output
against its gain times `C_k` is:

| X0 | X1 | X2 | X3 | X4 | X5 | X6 | X7 |
|---|---|---|---|---|---|---|---|
| 0 | 0.25 % | 0.008 % | 0.25 % | 0 | 0.24 % | 0.008 % | 0.24 % |

X0 and X4 need no rotation and are exact. The odd outputs carry the angle error
of beta and gamma. The end-to-end testbench prints these figures.

## Modules

| file | contents |
|---|---|
| `rtl/dct_pkg.sv` | widths `IN_W`, `W`, word types, and the shift/sign lists of alpha, beta and gamma |
| `rtl/cordic_microrot.sv` | one microrotation; parameters `W`, `SHIFT`, `SIGMA` |
| `rtl/cordic_rotator.sv` | cascade of `N` microrotations; parameters `SHIFTS[N]`, `SIGMAS[N]` (defaults are beta) |
| `rtl/dct_input_stage.sv` | stage 1: sign extension and four butterflies |
| `rtl/dct_even_part.sv` | even half, stages 2-4: X0, X4, and the alpha rotation giving X2, X6 |
| `rtl/dct_odd_output.sv` | odd half, stages 5-6 with the NOT row and the two carry-ins |
| `rtl/cordic_dct8.sv` | top: stage 1, even half, beta and gamma rotators, odd output network |

The top, `cordic_dct8`, has the ports `input logic signed [IN_W-1:0] x [8]` and
`output logic signed [W-1:0] X [8]`. It has no clock and no reset. To pipeline
it, add registers on the stage boundaries above; the published design registers
nothing.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`. `tb/tb_dct_ref_pkg.sv` holds the reference
model they share. It is written on 32-bit integers, and it forms the shifted
terms by integer division rounded toward minus infinity rather than by shifts.
The package also holds the cosine DCT basis and the gains above.

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
    rtl/dct_pkg.sv tb/tb_dct_ref_pkg.sv tb/tb_cordic_dct8.sv \
    --top-module tb_cordic_dct8
./obj_dir/Vtb_cordic_dct8
```

To run another testbench, substitute its name, e.g. `tb_cordic_rotator`,
`tb_cordic_microrot`, `tb_dct_input_stage`, `tb_dct_even_part` or
`tb_dct_odd_output`.

`tb_cordic_dct8` runs the top at its default sizes. It applies DC inputs, single
impulses, all 256 patterns of extreme samples and 20,000 random vectors, and it
checks:

* every output bit-exactly against the reference model;
* the error energy of each output against its scaled DCT coefficient;
* that a DC input gives X0 = 8c, X5 = 1 and all other outputs 0.

It also counts how often the NOT-plus-carry scheme left X3 and X7 exact while X5
was one LSB high, and how often a shift truncated. A count of zero is a failure.
The rotator testbench also checks the geometry: the angle and length of a rotated
vector must match `sum s*atan(2^-i)` and K.

## Where this RTL goes beyond the published description

The flow graph, the microrotation sets, the NOT-gate simplification, the
operation counts, the 8-bit/12-bit widths and the combinational form all follow
the published design. The following points are this implementation's own:

* **Signed input.** Signed samples and a single 12-bit word for every internal
  node. The published FPGA version may have sized each adder to its own bit
  growth.
* **Truncating shifts.** Shifts truncate; no rounding and no extra fractional
  bits.
* **Signs and crossings read from the figures.** Which input of each butterfly
  is subtracted, and how lines cross ahead of the rotations and stage 5, come
  from the published figures. The figures' arrows are not fully legible. The
  reading used here is the one that makes each output match its DCT row, and
  that makes the carry-ins compensate exactly as described (X3 and X7 exact, X5
  off by one).
* **Natural output order.** Outputs are in natural order. The flow graph draws
  them as X0, X4, X2, X6, X1, X5, X3, X7.
* **No scaling or quantizer.** The output scaling, or the quantizer it is meant
  to merge into, is not part of this RTL.
