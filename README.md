# ConSmax hardware in SystemVerilog

Softmax normalises an attention-score vector with two values that depend on the whole
vector: its maximum and the sum of its exponentials. An accelerator therefore has to hold
every score of a row before it can release one probability, and the P x V stage waits.
ConSmax (Liu et al., "ConSmax: Hardware-Friendly Alternative Softmax with Learnable
Parameters") replaces both values with two trained constants per attention head:

    ConSmax(S) = e^(S - beta) / gamma = C * e^S,    C = e^(-beta) / gamma

The maximum becomes a learned offset `beta` and the denominator a learned `gamma`. At
inference both fold into one constant `C`. Each score is then normalised on its own, as soon as
the Q x K engine produces it, and the P x V engine can consume the probabilities element by
element. The model is trained with the constants in place, so the probabilities do not need
to sum to one.

This repository holds synthesizable RTL for the ConSmax normalisation hardware, its two-level
structure and the arithmetic behind it, with self-checking testbenches. The Q x K and P x V
tensor cores and the key/value/output SRAMs around it belong to the host accelerator and are
not included. The design's score inputs and probability outputs are where they connect.

## Structure

```
                    consmax_top
   in_score[0] ──► consmax_unit 0 ──► p0_q[0]   (Output Path-0)
                      │ EXP REG, C
   in_score[1] ──► consmax_unit 1 ──► p0_q[1]
                      │ EXP REG
                      ▼
                reduction_unit ─────► p1_q[0]   (Output Path-1, wide scores)
```

* **Level 1: `consmax_unit`**, `N_UNITS` of them (default 2, as in the published block
  diagram). Each takes one 8-bit score per cycle and returns an 8-bit probability.
* **Level 2: `reduction_unit`**. It joins groups of adjacent units so that they act as one
  unit for a wider score (two units give one 16-bit score). It returns a 16-bit probability.

## The bitwidth-split exponential

A 256-entry table of e^S would be exact but large. The unit splits the two's-complement
score `S` into its upper nibble `m` (signed, -8..7) and its lower nibble `l` (unsigned,
0..15), so that `S = 16*m + l` and

    e^(s*S) = e^(16*s*m) * e^(s*l)

Here `s` is the quantisation step of the INT8 scores. Two 16-entry tables hold the two
factors: the **MSB-LUT** holds e^(16*s*m) and the **LSB-LUT** holds e^(s*l). A single
multiplier joins them. The tables return floating-point words, so the lookup also does the
INT-to-FP dequantisation, and no separate converter is needed.

The table contents depend on `s`. The tables are therefore register files that the host
fills through the configuration port. For a step `s`, write

    MSB-LUT[i] = bf16( e^(16*s*(i<8 ? i : i-16)) )      i = 0..15
    LSB-LUT[i] = bf16( e^(s*i) )
    SCALE      = bf16( 2^F * e^(-beta) / gamma )

Here `F` is the number of fraction bits wanted in the integer output (see the quantiser
below). The sign of the upper nibble exists only in these contents. The hardware just uses
the nibble as an address.

### Why the result is exact up to the table entries

The tables hold **bfloat16** words (1 sign, 8 exponent, 7 fraction bits). Their product goes
into the 24-bit **EXP REG**, whose format is 1 sign, 8 exponent and 15 fraction bits. Two 8-bit
significands multiply to at most 16 bits, which is exactly what this format stores. The
LUT merge therefore never rounds. The only error in e^S is the rounding of the two table
entries, at most 2^-9 relative each. The publication gives the widths (16-bit tables, 24-bit
product) but not the field layout. This layout is the one that makes the 24-bit product
lossless, and the 8-bit exponent covers the range that e^(16*s*m) needs.

### Scaling and quantisation

A second multiplier (24b x 16b to 24b, round to nearest even) applies the **Scaling REG**,
which holds the constant C. `fp_int_quant` then turns the 24-bit value into a signed
integer: it rounds to nearest with ties to even, and saturates to the output range. It has
no scale of its own. A fixed-point output with `F` fraction bits is obtained by putting
2^F into C.

Number conventions used by all arithmetic blocks:

* Exponent 0 means zero. There are no subnormals, and results below the normal range
  flush to (signed) zero.
* Exponent 255 is an ordinary exponent. There is no Inf or NaN.
* An overflowing product saturates to the largest magnitude.

## Mixed precision: the reduction unit

For a wider score the same identity applies slice by slice. For a 16-bit score,
`S16 = 256*h + b`, where the high byte `h` is signed and the low byte `b` is unsigned. Unit 0
takes `b` and unit 1 takes `h`. Each unit's tables are filled with the weight of its byte:

    unit 0: MSB-LUT[i] = e^(16*s*i),      LSB-LUT[i] = e^(s*i)           (i unsigned)
    unit 1: MSB-LUT[i] = e^(4096*s*m(i)), LSB-LUT[i] = e^(256*s*i)       (m(i) signed)
    unit 0: SCALE = 2^F * e^(-beta) / gamma

Each unit's EXP REG then holds the exponential of its own byte. The reduction unit
multiplies the EXP REGs of a group in a chain of 24b x 24b multipliers. The chain starts at
the group's last unit and runs towards its first, which is the direction drawn in the
published diagram. The chain output is multiplied by the first unit's C, quantised to 16
bits, and put out on Path-1 at the lane of the group's first unit.

`mode` sets the chain length:

* `mode` = m groups 2^m units.
* m = 0 is the 8-bit mode: every unit stands alone and Path-1 is idle.
* With the default two units, m = 1 is the 16-bit mode.
* With four units, m = 2 handles 32-bit scores.
* Unlike the LUT merge inside a unit, each link of the chain rounds its product to 24 bits
  (nearest even). A 16-bit result therefore carries one more rounding step than an 8-bit
  one.

In any mode, Path-0 still carries each unit's own 8-bit result.

## Interface and timing

| signal | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset (clears tables, C, pipeline) |
| `cfg_we` | in | 1 | write one configuration word this cycle |
| `cfg_unit` | in | log2(N_UNITS) | unit written |
| `cfg_sel` | in | 2 | `CFG_MSB_LUT`, `CFG_LSB_LUT` or `CFG_SCALE` (`consmax_pkg::cfg_sel_e`) |
| `cfg_addr` | in | 4 | table entry (ignored for `CFG_SCALE`) |
| `cfg_data` | in | 16 | bfloat16 word |
| `in_valid` | in | 1 | `in_score` and `mode` are valid |
| `mode` | in | MODE_W | precision mode, sampled with the scores |
| `in_score[k]` | in | 8 | score slice of lane k (lane 0 = least significant byte of a group) |
| `p0_valid`, `p0_q[k]` | out | N_UNITS, 8 | Path-0 result per lane |
| `p1_valid`, `p1_q[k]` | out | N_UNITS, 16 | Path-1 result at group-first lanes, only when `mode` > 0 |

The pipeline has two stages and no back-pressure. A score accepted at clock edge `t` is in
EXP REG after edge `t+1`. Its Path-0 and Path-1 results appear after edge `t+2`. Every
lane accepts one score per cycle, so the default design normalises two 8-bit scores or one
16-bit score per cycle. The mode travels with the data, so it may change from one cycle to
the next. A configuration write takes effect at the next edge. Rewriting C between heads
costs one cycle per unit, and the tables need not be reloaded unless the score step changes.

The longest combinational path runs from a Scaling REG or EXP REG through one or two
multipliers and the quantiser. In wider configurations the reduction chain adds one
24b x 24b multiplier per extra unit. That is the published structure; pipelining the
chain would add one cycle per register.

## Departures from the publication and choices made here

Taken from the publication:

* the two-level structure;
* the split into MSB and LSB tables of 16 x 16 bits;
* the 24-bit EXP REG and the 16-bit Scaling REG holding the merged beta/gamma constant;
* the two multipliers per unit and the FP-to-INT quantiser on each output path;
* the multiplier chain of the reduction unit, its direction and the use of the first
  unit's scaling register;
* two units, 8-bit scores and 8-bit or 16-bit results.

Chosen here, because the publication does not say:

* the floating-point layouts (bfloat16 and 1/8/15) and the zero, overflow and rounding rules;
* tables as host-written register files, and the configuration port;
* the pipeline registers, the two-cycle latency and the absence of back-pressure;
* the mode encoding and which lane takes which byte;
* a signed quantiser output.

The publication writes C once as e^(-beta)/gamma, which follows from its ConSmax formula,
and once as -e^(beta)/gamma. This design follows the formula. C is simply whatever bfloat16
value the host loads, so the signed quantiser serves either reading.

Not part of this RTL: the Q x K and P x V tensor cores with their accumulator, the query
FIFO, and the key, value and attention-output SRAMs of the host accelerator. The
publication takes the tensor cores from existing accelerators and does not give the memory
sizes.

## Files

`rtl/`

* `consmax_pkg.sv`: number formats (`fp16_t`, `fp24_t`) and the configuration select.
* `int_fp_lut.sv`: the 16-entry table.
* `fp_mult.sv`: the parameterised floating-point multiplier (16x16 to 24, 24x16 to 24,
  24x24 to 24).
* `fp_int_quant.sv`: the FP-to-INT quantiser.
* `consmax_unit.sv`: one Level-1 unit.
* `reduction_unit.sv`: Level 2.
* `consmax_top.sv`: the whole design.

`tb/`: one self-checking testbench per module, plus `consmax_ref_pkg.sv`. The package
is a reference model written in double precision, independent of the RTL's integer
datapath.

* `tb_consmax_top` runs the default-size design end to end. It covers:
  * a 256-token row in 8-bit mode;
  * a head change that drives outputs into saturation;
  * a 256-token row of 16-bit scores;
  * a stream that switches mode every cycle, with idle gaps.

  It counts each of those events and fails if one never happens.
* `tb_consmax_gpt2_heads` runs the attention-normalisation work of a 6-layer, 6-head
  GPT-2 model with a 256-token context. Each of the 36 heads gets its own beta and gamma,
  and the test checks that each head's row streams in 128 cycles.

Every testbench checks results bit-exactly against the reference and checks the latency.
Where the ideal value is known, it also checks that the hardware result is within the
bfloat16 rounding of C * e^S. Each ends by printing `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, from the repository root, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/consmax_pkg.sv tb/consmax_ref_pkg.sv \
    rtl/int_fp_lut.sv rtl/fp_mult.sv rtl/fp_int_quant.sv \
    rtl/consmax_unit.sv rtl/reduction_unit.sv rtl/consmax_top.sv \
    tb/tb_consmax_top.sv --top-module tb_consmax_top
./obj_dir/Vtb_consmax_top
```

For a single block, list the package files, the block and the modules it instantiates,
and its testbench. All testbenches finish in well under a second.

To change the design:

* `N_UNITS` (a power of two) adds lanes and longer reduction chains.
* `OUT0_W` and `OUT1_W` set the output widths.
* The score width per unit is fixed at 8 bits, two 4-bit slices.

Coarse synthesis of the default design with Yosys gives about 400 word-level cells, 133
flip-flops and 1024 bits of table storage (2 units x 2 tables x 16 x 16 bits).
