# L-Mul FP8 approximate multiplier

Multiplying two floating-point numbers means adding their exponents and
multiplying their significands: (1 + mx)(1 + my) = 1 + mx + my + mx·my. Only
the last term needs a real multiplier. The L-Mul algorithm drops that term and
adds a small constant, 2^-l(m), in its place:

    L-Mul(x, y) = (1 + mx + my + 2^-l(m)) · 2^(Ex + Ey)
    l(m) = m for m <= 3,  3 for m = 4,  4 for m > 4      (m = mantissa bits)

What is left is two small additions and some bit handling. This RTL builds
such a multiplier for 8-bit floating point (FP8) out of the cells an FPGA
logic slice offers: 6-input LUTs and a fast carry chain. Each LUT function
is written as a small module of its own. The carry chain is written as plain
logic. The default format is E4M3 (1 sign bit, 4 exponent bits, 3 mantissa
bits). One parameter selects any of the six FP8 splits, E6M1 to E1M6.

The multiplier is approximate by design. Its outputs are not IEEE products,
and the sections below say exactly what it computes.

## Number format and the product word

An operand is `{s, e[EW-1:0], m[MW-1:0]}` with `EW + MW = 7`. Its value is
`(-1)^s · 2^(e - bias) · (1 + m/2^MW)`, where `bias = 2^(EW-1) - 1`. For E4M3,
bias = 7 and `0x4F` = 0 1001 111 = 2^2 · 1.875 = 7.5.

The product is a 9-bit word:

    product = { sign, exponent[EW:0], mantissa[MW-1:0] }

The exponent has one bit more than an operand's exponent and uses the same
bias. Products between 2^(2^EW - bias) and 2^(2^(EW+1) - bias) can therefore
be told apart from the in-range ones. There is no saturation or rounding to
FP8, so a consumer must narrow the word to its own format. Exponents below
zero wrap modulo 2^(EW+1) (see *Limits*).

## The datapath

    fp8_x, fp8_y ─► input registers (16 FF)
                      │
        ┌─────────────┴────────────────┐
        │ mantissa adder               │ exponent adder
        │  s1 = x_m + y_m   (MW bits)  │  t1 = x_e + y_e        (EW bits)
        │  pm = s1 + 2km    (MW+1 bits)│  pe = t1 + bias*(c)    (EW+1 bits)
        │  c  = pm[MW+1:MW] ──────────►│
        └─────────────┬────────────────┘
                      ▼
              post-processing: sign, zero, shift  ─►  output register (9 FF)

**Mantissa adder** (`mantissa_adder`). An MW-bit adder adds the two mantissa
fields. Its carry out becomes bit MW of the operand of a second, (MW+1)-bit
adder. That adder adds the L-Mul constant `2km = 2^(MW - l(MW))`, which is
2^-l(MW) counted in mantissa LSBs. The constant is 1 for E6M1, E5M2 and E4M3,
2 for E3M4 and E2M5, and 4 for E1M6. The result `pm` has MW+2 bits. Its top
two bits `c = pm[MW+1:MW]` are the integer part of `mx + my + 2^-l`: the sum
of significands is `1c.frac`, so it is 1.x, 2.x (`01`), 3.x (`10`) or 4.x
(`11`).

**Folding the bias (bias\*).** A normal FP multiplier adds the exponents,
subtracts the bias, then adds a renormalisation step. Here the two constants
are merged into one constant, bias\*, chosen by `c`:

| format | c = 00 | c = 11 | c = 01 or 10 |
|--------|-------:|-------:|-------------:|
| E6M1   | -31    | -29    | -30          |
| E5M2   | -15    | -13    | -14          |
| E4M3   | -7     | -5     | -6           |
| E3M4   | -3     | -1     | -2           |
| E2M5   | -1     | 1      | 0            |
| E1M6   | 0      | 2      | 1            |

i.e. `bias* = -bias + {0, +1, +1, +2}[c]`. `lmul_pkg` computes these numbers
from the format. A testbench checks them against the table above.

**Exponent adder** (`exponent_adder`). An EW-bit adder adds the two exponent
fields. Its carry out becomes bit EW of a second, (EW+1)-bit adder, which
adds bias\* as a two's-complement constant. The carry out of the second
adder is dropped. The exponent adder has to wait for `c` from the mantissa
adder, so the critical path runs through both carry chains.

**Post-processing** (`post_processing`) sets each output bit:

- *sign*: `x[7] ^ y[7]` (`lut_a`). This bit is not cleared for a zero
  operand, so `-0 · y` gives a negative zero.
- *zero*: set when `x[6:0] == 0` or `y[6:0] == 0`. It clears the exponent and
  the mantissa.
- *exponent*: `pe`, one `lut_c` per bit, cleared when *zero* is set.
- *mantissa*: `{1, pm[MW-1:1]}` when `c == 10`, otherwise `pm[MW-1:0]`. The
  top bit comes from `lut_d` and each lower bit from one `lut_e`. All of them
  are cleared when *zero* is set.

The renormalisation is deliberately coarse. For `c == 01` the significand
`10.f` is not shifted: the exponent goes up by one and the fraction bits `f`
are reused unchanged. The product then comes out as `2^(E+1) · (1.f)`, while
the L-Mul sum is `2^E · (2.f)`. For `c == 10`, which only E3M4, E2M5 and E1M6
can reach, the mantissa is shifted right and the leading 1 moves into the top
mantissa bit. `c == 11` cannot occur with the constants above. It still has
its own bias\* entry.

### Worked example (E4M3)

7.5 × 7.5 with x = y = `0x4F`:

- mantissas: 7 + 7 = 14; 14 + 1 = 15 = `01_111`, so c = 01 and the mantissa is 111.
- exponents: 9 + 9 = 18; 18 + bias\*(01) = 18 - 6 = 12 = `01100`.
- product: `0_01100_111` = 2^(12-7) · 1.875 = 60.0. The exact product is 56.25.

## Adders from LUTs and a carry chain

Each adder bit is one LUT cell (`lut_b`) and one cell of a carry chain
(`carry8`). `cc_adder` puts N of them together into an N-bit adder.

- `lut_b` gives the half-sum `o5 = a ^ b'` and the generate bit
  `o6 = a & b'`. Here `b' = b ^ ci`: when the chain's carry-in is 1, the cell
  inverts b and the adder subtracts.
- `carry8` has eight cells. Cell i outputs `o[i] = s[i] ^ c[i]` and passes on
  `c[i+1] = s[i] ? c[i] : di[i]`. This is the multiplexer-and-XOR structure of
  an FPGA carry chain.
- `cc_adder #(N)` joins ⌈N/8⌉ chains. The multiplier never needs more than 7
  bits, so it always uses one chain per adder. That makes four chains in all,
  for any format.

The multiplier only adds. The subtract mode exists because the cell supports
it.

## Interface and timing (`lmul_fp8`)

| port      | dir | width     | meaning |
|-----------|-----|-----------|---------|
| `clk`     | in  | 1         | clock, rising edge |
| `rst_n`   | in  | 1         | asynchronous, active-low; clears all registers |
| `fp8_x`   | in  | 8         | operand x |
| `fp8_y`   | in  | 8         | operand y |
| `product` | out | EW+MW+2=9 | registered product |

| parameter | default | meaning |
|-----------|---------|---------|
| `MW`      | 3       | mantissa bits, 1..6 (E6M1 .. E1M6) |
| `EW`      | 7 - MW  | exponent bits; leave it at its default |

On every clock edge the input registers capture the operands. The product of
the pair captured at edge t is on `product` after edge t+1. The latency is
two cycles, and a new pair can enter every cycle. There is no valid signal.
The multiplier uses 8 + 8 + 9 = 25 flip-flops. `lmul_datapath` is the same
multiplier without registers.

## How far it follows the published design, and where it departs

Taken from the published design:
- the L-Mul equation and the l(m) rule
- the split into mantissa adder, exponent adder and post-processing, and the
  two chained adders in each adder
- the bias\* table
- the carry-case table and the mantissa and exponent selection equations
- the zero rule
- the five LUT functions (sign, adder cell, exponent bit, top mantissa bit,
  lower mantissa bit)
- the registered inputs, and the 25-flip-flop total

Where the description left a choice or contradicted itself, this design took
the following readings:

- **The L-Mul constant.** The bit-level form of the algorithm in the source
  writes the offset as 2^l(m) over 2^m. For E4M3 that would add a whole 1.0 to
  the significand. The design uses 2^(m - l(m)) LSBs, which is the algorithm's
  own 2^-l(m).
- **l(4).** The rule as published gives both 3 and 4 for m = 4. The design
  uses 3.
- **Adder widths.** The prose swaps the widths: it calls the exponent adders
  m and m+1 bits and the mantissa adders e and e+1 bits. The design follows
  the block diagram: EW and EW+1 bits for the exponent, MW and MW+1 bits for
  the mantissa.
- **Generate bit in subtract mode.** The adder cell's generate output is
  written as `add1·add2`. That is right for addition, but a subtracting chain
  would then never produce a carry. In subtract mode the design uses the
  inverted operand instead. Nothing in the multiplier subtracts.
- **How bias\* enters.** bias\* is added in two's complement with carry-in 0.
  It could equally be subtracted as a magnitude with carry-in 1. Both give the
  same result.
- **Output register and reset.** The output register is inferred from the
  25-flip-flop count. The asynchronous reset is this design's own choice.
- **Not in the RTL.** The physical placement constraints (LUTs beside their
  carry chain, input registers in the adjacent logic blocks) are not
  expressed. Neither is the mapping of each LUT function onto a specific
  fracturable LUT and its INIT value; synthesis does that mapping.
- **Not built.** The CNN and GCN accelerators that the multiplier was
  evaluated in are not part of this RTL.

## Limits of the arithmetic

- Infinities, NaNs and subnormal operands are not treated specially. A
  subnormal operand is read as if it had a hidden 1.
- Exponent overflow is visible in bit EW of the product exponent. Underflow
  wraps modulo 2^(EW+1) and cannot be told apart from a large exponent.
- Accuracy. `tb_lmul_formats` measures, for each format, the error against
  the exact product of the decoded FP8 values. It counts only non-negative
  operand pairs whose product has a nonzero value and an exponent that does
  not wrap. The metrics are error probability (EP), mean absolute error
  (MAE), mean relative error (MRE), mean squared error (MSE) and normalised
  error distance (NED, the mean error over the largest error):

  | format | EP    | MAE     | MRE   | MSE     | NED   |
  |--------|------:|--------:|------:|--------:|------:|
  | E6M1   | 1.000 | 1.2e16  | 0.381 | 5.5e34  | 0.001 |
  | E5M2   | 1.000 | 5.0e6   | 0.170 | 2.8e15  | 0.003 |
  | E4M3   | 0.957 | 119     | 0.125 | 4.8e5   | 0.008 |
  | E3M4   | 0.990 | 2.01    | 0.277 | 36.7    | 0.010 |
  | E2M5   | 0.997 | 0.529   | 0.672 | 0.658   | 0.038 |
  | E1M6   | 1.000 | 1.13    | 2.861 | 1.98    | 0.273 |

  For E4M3 the published evaluation of L-Mul gives EP 0.968, MAE 141,
  MRE 0.068, MSE 7.56e5 and NED 0.005. EP, MAE, MSE and NED are of the same
  order as here. The relative error is larger here. Two causes add up: the
  unshifted mantissa in the `c == 01` case, and subnormal inputs being read
  with a hidden 1. The second matters most for E1M6, where half of all inputs
  are subnormal. The conventions behind the published figures are not stated
  (how the product is decoded, which pairs count), so the two sets of numbers
  should be compared as orders of magnitude only.

## Files

`rtl/`:
- `lmul_pkg.sv`: format constants (bias, l(m), offset, bias\*)
- `lut_a.sv`, `lut_b.sv`, `lut_c.sv`, `lut_d.sv`, `lut_e.sv`: the LUT cells
- `carry8.sv`: the carry chain
- `cc_adder.sv`: the N-bit adder
- `mantissa_adder.sv`, `exponent_adder.sv`, `post_processing.sv`: the three
  parts of the datapath
- `lmul_datapath.sv`: the combinational multiplier
- `lmul_fp8.sv`: the top level

`tb/`:
- one self-checking testbench per module, `tb_<module>.sv`
- `tb_lmul_formats.sv`: all six formats with the error statistics above
- `lmul_ref_pkg.sv`: an integer reference model, written straight from the
  equations above

Every testbench prints `TB_RESULT checks=N failures=M`. Among them:
- `tb_lmul_fp8` streams all 65536 E4M3 operand pairs through the default
  top. It checks each product, the two-cycle latency and the reset. It also
  counts the zero, carry-00, carry-01, negative and out-of-range cases and
  fails if any of them never occurs.
- `tb_lmul_formats` does the same for every format.

## Simulating

With Verilator 5 (two-state simulation):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_lmul_fp8 rtl/lmul_pkg.sv tb/lmul_ref_pkg.sv tb/tb_lmul_fp8.sv
    ./obj_dir/Vtb_lmul_fp8

To run another testbench, replace the top module and the last file. To build
another format, set `MW` on `lmul_fp8`, for example `lmul_fp8 #(.MW(2))` for
E5M2. Leave `EW` at its default.
