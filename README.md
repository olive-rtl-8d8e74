# OliVe: an outlier-victim pair quantization accelerator in SystemVerilog

Large Transformer models have a few activation and weight values, well under
1 %, that are far larger than the rest. Plain 4-bit quantization cannot
represent them, and clipping them ruins accuracy. Earlier outlier-aware
designs store outliers separately in a sparse list, which breaks the regular,
aligned memory access that accelerators depend on.

OliVe keeps outliers in place. Values are grouped into pairs of neighbours.
When one value of a pair is an outlier, its partner (the *victim*) is set to
zero. The victim's 4 bits then carry a marker, the *identifier* `1000`. The
outlier itself is stored in the other 4 bits in a wide-range format. Every
pair still fills exactly one byte. Every byte decodes on its own, so memory
stays dense and aligned, and the only extra hardware is a small decoder on
the path into the multipliers.

This RTL implements the systolic-array form of that design. It is a
64 x 64 output-stationary array of 4-bit MAC units that can also run as a
32 x 32 array of 8-bit MACs. The OVP decoders sit only on the array's two
input edges. OVP encoders on the output path re-quantize the results.

## 1. Number formats

All 4-bit codes are sign + 3 bits unless stated.

| Type | Used for | Values | Code `1000` |
|---|---|---|---|
| int4 | normal values | -7 ... 7 (two's complement) | identifier (was -8) |
| flint4 | normal values | 0, ±1, ±2, ±3, ±4, ±6, ±8, ±16 | identifier (was -0) |
| E2M1 abfloat | outliers | ±(2 or 3) << (bias + e), e = 0..3 | never used |
| int8 | normal values, 8-bit mode | -127 ... 127 | `1000_0000` identifier |
| E4M3 abfloat | outliers, 8-bit mode | ±(8..15) << (bias + e), e = 0..15 | never used |

**Abfloat** (adaptive biased float) is a small float with a programmable
exponent bias. The bias pushes its range above the normal values so that the
two ranges do not overlap. E2M1 code `{s, e1, e0, m}` means `(1m)_2 << (bias + e)`.
Code `x000` means zero, and the encoder never emits it, so an outlier cannot
look like an identifier. With bias 2 the outlier magnitudes are 12, 16, 24,
32, 48, 64, 96, which starts just above int4's 7. For flint4 the bias is 3
(24 ... 192).

**A pair byte:** value 1 is bits 3:0 and value 2 is bits 7:4. Value 1 is the
earlier element in memory.

| byte | value 1 | value 2 |
|---|---|---|
| `1000 xxxx` (bits 7:4 = 1000) | outlier, abfloat(xxxx) | victim, 0 |
| `xxxx 1000` | victim, 0 | outlier, abfloat(xxxx) |
| anything else | normal | normal |

The 8-bit form is the same with 16-bit pairs and identifier `1000_0000`.

## 2. Exponent-integer pairs

The decoders turn every value into a pair `<e, i>` meaning `i << e`. The
4-bit pair is one byte: exponent in bits 3:0 and signed integer in bits 7:4
(`olive_pkg::exp_int4_t`). For an int4 normal it is `<0, value>`. For an
abfloat outlier it is `<bias + e, ±(2|3)>`. flint4 magnitudes above 3 use a
non-zero exponent: 4 = <1,2>, 6 = <1,3>, 8 = <2,2>, 16 = <3,2>.

So a multiplier never needs a floating-point unit:

    <a, b> x <c, d> = (b * d) << (a + c)

A MAC unit is therefore a 4-bit integer multiplier, a 4-bit exponent adder,
a shifter and a 32-bit accumulator adder.

## 3. The decoders

* `abfloat4_decoder` decodes E2M1. It has the bias adder, the constant `001`
  joined above the mantissa bit, a zero path for `x000`, and a negate path
  (invert, +1) chosen by the sign bit.
* `normal4_decoder` decodes int4 or flint4, chosen by `ntype`.
* `ovp_decoder4` decodes one byte into two pairs (16 bits out; value 1 in
  bits 7:0). It has two `== 1000` comparators and two normal decoders. One
  abfloat decoder is shared between the two positions, because a byte holds
  at most one outlier.
* `abfloat8_decoder` and `ovp_decoder8` are the 8-bit versions: E4M3 and
  int8. The output integer is 8 bits.

All of these are purely combinational.

## 4. 8-bit arithmetic on 4-bit PEs (the subtle part)

In 8-bit mode a 2 x 2 group of PEs computes one 8-bit product. An 8-bit
integer `i` with exponent `e` is split into a signed high nibble `h` and an
unsigned low nibble `l`: `i << e = <e + 4, h> + <e, l>`. The product then
expands into four 4-bit products, one per PE of the group:

    x*y = <4+ex,hx><4+ey,hy> + <4+ex,hx><ey,ly> + <ex,lx><4+ey,hy> + <ex,lx><ey,ly>
           PE(0,0)              PE(0,1)            PE(1,0)            PE(1,1)

How this is wired:

* The border unit (`olive_edge`) does the split. The even row (or column) of
  each pair receives `<e+4, h>` and the odd one receives `<e, l>`.
* Each PE knows its position through the parameters `LOW_ROW` and `LOW_COL`.
  In 8-bit mode a PE on an odd row reads the activation integer as unsigned.
  A PE on an odd column does the same for the weight integer. The multiplier
  is therefore 5 x 5 bits signed.
* Each group has one extra adder, which sums its four accumulators. Only
  these sums are read out in 8-bit mode.
* The 4-bit exponent field limits an 8-bit outlier to `e <= 11`. The encoder
  must keep to that limit. Clipping outliers to 2^15 in magnitude
  (integer <= 15) satisfies it, and it is also what keeps the 32-bit
  accumulators from overflowing.

The same split handles both int8 and E4M3 outliers. An abfloat value simply
brings a non-zero `e`.

## 5. The accelerator core (`olive_top`)

    input buffer  --> olive_edge (64 x ovp_decoder4, 32 x ovp_decoder8) --> rows
    weight buffer --> olive_edge (same)                                 --> columns
                       olive_array: 64 x 64 olive_mac, 32 x 32 group adders
    result row --> 32 x ovp_encoder4 (or 16 x ovp_encoder8) --> output buffer {OVP bytes, 64 x int32}
    olive_ctrl sequences one tile

Counts at the defaults: 4096 4-bit PEs, 128 4-bit OVP decoders (64 per edge)
and 64 8-bit OVP decoders (32 per edge). Decoders on the edges only, rather
than one per PE, are what make the overhead small.

**Buffer words.** Buffer word `p` holds one byte per array row. In the input
buffer, byte `i` is the OVP pair of elements `2p` and `2p+1` of row `i` of A.
The weight buffer holds column `j` of W the same way. In 8-bit mode, bytes
`2r` and `2r+1` hold the 16-bit OVP pair of row `r`. One word therefore covers
two steps of the reduction dimension K.

**Issue and skew.** A row consumes one element per cycle, so `olive_edge`
holds each word for two cycles. It issues value 1 first, then value 2. The
controller reads a word every second cycle, which gives a gap-free stream.
Row `i` is then delayed by `i` registers. The activations move one PE right
per cycle and the weights one PE down per cycle. As a result PE (i, j) meets
`A[i][k]` and `W[k][j]` in the same cycle. A valid bit travels with the
activations and gates accumulation.

**Tile sequence (`olive_ctrl`).** The steps are: clear the accumulators
(skipped when `accumulate` is set); feed `kp` words in `2*kp` cycles; wait
`2N+4` cycles for the wavefront to leave the array; then write one result row
per cycle to the output buffer. There are R = 64 rows, or 32 in 8-bit mode.
`done` is high in cycle `2*kp + 2N + R + 6` after the start cycle. For
N = 64 in 4-bit mode that is `2*kp + 198` cycles. The MAC rate is 4096 4-bit
MACs per cycle once the array is full.

**Long reductions.** One buffer load holds K = 512 elements (256 words). A
longer K runs as several tiles. Reload the buffers and start again with
`accumulate = 1`. The results stay in the accumulators (output stationary).

**Output re-encoding.** On the way out, each pair of adjacent columns goes
through `ovp_encoder4`. In 8-bit mode each pair of adjacent group sums goes
through `ovp_encoder8` instead. The result is a byte-aligned OVP stream that can be
used directly as the next layer's activations. The encoder follows the
paper's pair algorithm:

    if |v1| > T and |v1| > |v2|: v1 -> abfloat, v2 -> 1000
    elif |v2| > T:               v1 -> 1000,    v2 -> abfloat
    else:                        both -> int4 or flint4

The abfloat conversion works as follows. `exp = floor(log2|x|) - 1` and
`base = round(|x| / 2^exp)`, which is 2, 3 or 4; a base of 4 becomes 2 with
`exp + 1`. The code is then `{sign, exp - bias, base & 1}`. The results are
32-bit integers. `q_frac` says how many of their low bits are fraction bits,
so the scale is a power of two. `q_thr` is the threshold `T` in the same
units.

The 8-bit encoder follows the same rule. Normal values are rounded to int8
in [-127, 127]. Outliers become E4M3: `exp = floor(log2|x|) - 3`, and the base
is rounded into 8 ... 16; a base of 16 becomes 8 with `exp + 1`. Outliers
are clipped to `15 << 11`, which is just under 2^15. That clip is what
protects the 32-bit accumulators in the next layer. It also keeps the
high-nibble exponent `e + 4` inside the PEs' 4-bit exponent field. The
smallest code (all zeros) is not allowed, so it is raised to the next code,
as in the 4-bit case.

**Output buffer word `r`.** Bits `32*j +: 32` hold `C[r][j]`. In 4-bit
mode, bits `2048 + 8*m +: 8` hold the OVP byte of `C[r][2m]` and
`C[r][2m+1]`. In 8-bit mode only rows and columns below 32 are used. There,
bits `2048 + 16*m +: 16` hold the 16-bit OVP pair of `C[r][2m]` and
`C[r][2m+1]`. N must be a multiple of 4, so that every 8-bit result has an
encoder.

### Ports of `olive_top`

| Port | Meaning |
|---|---|
| `ib_we/ib_waddr/ib_wdata`, `wb_we/...` | fill the input and weight buffers (512-bit words) |
| `start`, `kp` | run a tile over `kp` words (K = 2*kp) |
| `mode8` | 0: 4-bit OVP; 1: 8-bit OVP on 2x2 groups |
| `accumulate` | do not clear the accumulators first |
| `a_ntype`, `w_ntype` | normal type of A and of W: int4 or flint4 |
| `a_bias`, `w_bias`, `a_bias8`, `w_bias8` | abfloat biases, 4-bit and 8-bit |
| `q_frac`, `q_thr`, `q_ntype`, `q_bias` | output re-encoding; 8-bit tiles use int8, and `q_bias` is then the E4M3 bias |
| `ob_re/ob_raddr/ob_rdata` | read the output buffer (one cycle latency) |
| `busy`, `done` | tile status; `done` is a one-cycle pulse |

All the instruction fields are captured at `start`. This mirrors the
`mmaovp.s32.ovpi4.ovpf4.s32.s4` instruction that the design proposes for
GPUs: separate normal types for the two operands, plus an abfloat bias.

## 6. What follows the paper and what does not

Taken from the paper:
* the OVP byte format, the identifiers and the value sets of the data types;
* the E2M1 decoder equations and structure;
* the OVP decoder structure (two comparators, two normal decoders, one shared
  outlier decoder);
* the exponent-integer MAC and the 32-bit accumulator;
* the `<e+4, h> + <e, l>` split onto four PEs, with one extra adder per four
  PEs;
* decoders on the array edges only, and the counts 4096 / 128 / 64;
* the encoder algorithms.

Choices made here, where the paper gives no detail:
* the flint4 bit assignment and its exponent-integer mapping;
* the 8-bit pair width (4-bit exponent, 8-bit integer);
* the unsigned-low-nibble mechanism for 8-bit mode;
* the group adder summing accumulators at read-out, rather than products
  every cycle (the results are the same);
* the two-cycle word issue, the skew registers and the valid bit;
* the controller, the `accumulate` bit and the buffer sizes (512-bit words,
  256 words deep for input and weight, 64 for output);
* the output re-encoding path: a power-of-two scale and ties rounded away
  from zero;
* the 8-bit encoder's details, which the paper only calls a simple extension;
* a byte with both halves `1000` decodes to two zeros.

Known departures and limits:
* An E4M3 exponent above 11 wraps in the 4-bit exponent field. `ovp_encoder8`
  never produces one, but hand-made input data must respect the limit.
* Accumulators wrap at 32 bits.
* DRAM is outside the core. The buffer ports stand in for it.

## 7. Files

| File | Contents |
|---|---|
| `rtl/olive_pkg.sv` | pair structs, identifiers, normal-type enum |
| `rtl/abfloat4_decoder.sv`, `rtl/normal4_decoder.sv`, `rtl/ovp_decoder4.sv` | 4-bit decoding |
| `rtl/abfloat8_decoder.sv`, `rtl/ovp_decoder8.sv` | 8-bit decoding |
| `rtl/olive_mac.sv` | PE |
| `rtl/olive_array.sv` | PE grid, group adders, row read port |
| `rtl/olive_edge.sv` | border decoders, 2-cycle issue, 8-bit split, skew |
| `rtl/ovp_encoder4.sv`, `rtl/ovp_encoder8.sv` | output OVP encoders, 4-bit and 8-bit |
| `rtl/olive_buffer.sv` | buffer memory (array, synchronous read) |
| `rtl/olive_ctrl.sv` | tile sequencer |
| `rtl/olive_top.sv` | the core |
| `tb/olive_ref_pkg.sv` | reference models: value tables, real-arithmetic encoder |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/olive_top_tb_body.svh` | shared body of the two end-to-end testbenches |

## 8. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
      rtl/olive_pkg.sv tb/olive_ref_pkg.sv tb/tb_olive_top.sv \
      --top-module tb_olive_top -o sim && ./obj_dir/sim

Swap in any `tb_<module>.sv` the same way. The testbenches are:

* The decoders are checked exhaustively against the value tables.
* The MAC unit is checked with random sequences, and with a 2 x 2 group doing
  8-bit products.
* The array (N = 8) is checked on whole matrix products in both modes.
* Both encoders are checked against real-arithmetic models, with 20 000
  random cases each. The 8-bit test also checks the clip.
* The controller is checked for order, addresses and the exact tile length.
* `tb_olive_top` runs at N = 8 and `tb_olive_top_full` at the full defaults
  (N = 64). Both run five tiles: int4 x int4; flint4 x int4 accumulated onto
  the first; int4 x flint4; 8-bit; 8-bit accumulated onto the previous one.
  They compare every result word and every re-encoded byte with the
  reference. They also check the cycle count, and they fail if any mechanism
  never happened: left outliers, right outliers, flint4, 8-bit, E4M3
  outliers, re-encoded outliers and normals (4-bit and 8-bit), and
  accumulation.

The full-size build takes a few minutes in Verilator because of the 4096 PE
instances.

To change the array size, set `N` on `olive_top`. It must be even, so that
2 x 2 groups tile the array. To change the buffer depth, set `IB_DEPTH`.
