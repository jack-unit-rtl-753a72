# Jack unit — a multi-format multiply-accumulate unit in SystemVerilog

AI accelerators usually support several number formats by placing one
multiplier per format side by side in every MAC cell. At any moment only one
of them is busy, so most of the cell's area sits idle. The Jack unit takes the
opposite approach. A single integer multiplier array serves bfloat16, FP8,
INT8, INT4 and the block-scaled "microscaling" formats MXINT8, MXINT4 and
MXFP8. Floating-point products are added with integer adders, not a
floating-point adder tree. This works because each product is aligned to the
largest exponent *inside* the multiplier array, before the adders see it.

This RTL implements the unit described in "Jack Unit: An Area- and
Energy-Efficient Multiply-Accumulate (MAC) Unit Supporting Diverse Data
Formats" (Noh et al.). The block structure, the grouping of sub-multipliers
and the per-mode behaviour follow that description. Encodings, exact widths,
register placement and corner-case handling are not given there; they are this
implementation's own choices, and each is listed below.

## What one operation computes

One operation is a short dot product, returned as one 16-bit word:

| mode     | elements per operand | products summed | element format                      | result |
|----------|----------------------|-----------------|-------------------------------------|--------|
| bfloat16 | 4                    | 4               | {s:1, e:8, m:7}                     | 16-bit FP |
| FP8      | 16                   | 16              | {s:1, e:4, m:3}                     | 16-bit FP |
| INT8     | 4                    | 4               | 8-bit integer, signed or unsigned   | INT16, saturated |
| INT4     | 16                   | 16              | 4-bit integer, signed or unsigned   | INT16, saturated |
| MXINT8   | 4                    | 4               | INT8 element, 8-bit shared exponent per operand | 16-bit FP |
| MXINT4   | 16                   | 16              | INT4 element, shared exponent       | 16-bit FP |
| MXFP8    | 16                   | 16              | {s:1, e:4, m:3} element, shared exponent | 16-bit FP |

The 16-bit FP result uses the bfloat16 layout {sign, exponent[7:0] with bias
127, mantissa[6:0]}, because the exponent path is 8 bits wide. There is no
accumulator input. Adding results across operations is left to the logic
around the unit.

MX modes compute `(x̂ · ŵ) · 2^(sx−127) · 2^(sw−127)`. Here `sx` and `sw` are
the shared block exponents, given per operation on `shared_exp_x` and
`shared_exp_w`. To build an MX block longer than one operation (for example
the standard block of 32 elements), issue several operations with the same
shared exponents.

## Inside the unit

```
          signs 2x16b     exponents 2x64b    significands / INT 2x32b per cycle
              |                 |                       |
         +----v-----+   +-------v--------+     +--------v---------+
         |   XOR    |   |   exponent     |     |  4 operand links |  (8 wires each)
         |  bundle  |   |   extractor    |     +--------+---------+
         +----+-----+   | 16 calculators |              |
              |         | 4:1 / 16:1 max |              |
              |         +---+--------+---+              |
              |   product   | shifts | max exponent     |
   ===========|=============|========|==================|======  pipeline register 1
              |             |        |                  |
              +-------------+--------|------> +---------v---------+
                                     |        | reconstructed CSM |
                                     |        | 16 sub-multipliers|
                                     |        | 16 barrel shifters|
                                     |        | INT adder trees   |
                                     |        +---------+---------+
                                     |                  | signed sum (21b)
                               +-----v------+           |
                               | normalizer <-----------+----------+
                               +-----+------+                      | INT path
                               |  rounder   |                 saturate to 16b
                               +-----+------+                      |
                                     +------------> mux <----------+
   =============================================|===============  pipeline register 2
                                           out_data (16b)
```

`jack_unit` connects the blocks as above. The other modules are:

* `sub_multiplier` — a 4×4 multiplier. Each operand nibble is extended to 5
  bits, signed or unsigned, so four of them can form a signed or unsigned 8×8
  product.
* `operand_link` — the 8-wire input link of one CSM. CSM means carry-save
  multiplier: four sub-multipliers that can work as one 8×8 multiplier or as
  four 4×4 multipliers.
* `xor_bundle` — 16 sign XORs.
* `exponent_calculator`, `max_comparator`, `exponent_extractor` — product
  exponents, the maximum exponent, and the alignment shifts.
* `barrel_shifter` — the per-product alignment shifter.
* `reconstructed_csm` — the multiplier array and the integer adder trees.
* `normalizer`, `rounder` — the floating-point back end.
* `mode_ctrl` — decodes the mode into enables and constants.
* `jack_pkg` — holds the mode enum, the shared widths and the activation and
  configuration structs.

### Aligning inside the multiplier

In a conventional FP MAC, each product is finished (normalised and rounded)
and then fed to a floating-point adder. That adder compares exponents, shifts
the smaller significand and adds. The Jack unit moves the compare-and-shift in
front of the adders:

1. The exponent extractor forms every product exponent as `ex + ew + bias`
   (one calculator per product) and takes the maximum `emax`. bfloat16 uses a
   4-input comparator; the 4-bit FP modes use a 16-input one.
2. Each product's shift is `emax − e[i]`, saturated to 15.
3. In the CSM, every 4×4 sub-product goes through its own barrel shifter and
   is shifted right by its product's shift. It is then negated if the
   product's sign (from the XOR bundle) is set.
4. All aligned sub-products are now integers on one common scale,
   `2^(emax − 127 − frac)`. Plain two's complement adders sum them. `frac` is
   14 for bfloat16 (1.7 × 1.7 fixed point), 6 for FP8/MXFP8 (1.3 × 1.3) and 0
   for MX integers.
5. Only the final sum is normalised (leading-one search, exponent adjusted
   up or down) and truncated to 7 mantissa bits.

There is no rounding until the end. Bits that an alignment shift pushes below
the sub-product's LSB are dropped. For bfloat16, each sub-product is shifted
on its own before being weighted by its nibble position. The truncation error
is therefore a little larger than shifting the whole 16-bit product once: at
most about 289 units of the common scale per product. The end-to-end testbench
checks every result against the exact real-valued dot product within that
bound.

### 2D sub-word parallelism

The unit contains four CSMs of four sub-multipliers each. Sub-multiplier
position `k` of CSM `c` is wired as follows:

| position k | 8-bit modes (element c)  | weight | 4-bit modes |
|------------|--------------------------|--------|-------------|
| 0          | w[3:0] × x[3:0]          | ×1     | lane 4c+0   |
| 1          | w[7:4] × x[3:0]          | ×16    | lane 4c+1   |
| 2          | w[3:0] × x[7:4]          | ×16    | lane 4c+2   |
| 3          | w[7:4] × x[7:4]          | ×256   | lane 4c+3   |

A plain precision-scalable CSM would weight and add its own four sub-products,
so four CSMs would need twelve position shifters. Here the four sub-products
at the same position (one from each CSM) always share a weight. They are
therefore first added in a small intra-group tree, and then the group sum is
shifted once. Only three position shifters remain (×16, ×16, ×256), and the
intra-group adders are narrow. An inter-group tree then computes
`(g0 + g1·16) + (g2·16 + g3·256)`. In the 4-bit modes the position weights
are switched off and the same tree simply adds 16 independent products.

Widths: sub-product 9 bits signed, group sum 11 bits, final sum 21 bits. Each
of these is one sign bit more than the magnitude widths the original design
quotes (8, 10, 18), so that signed FP terms and two's complement INT terms
share the tree.

### Operand delivery: the 8-wire links

Each CSM has 8 input wires per operand, so the unit takes 32 bits of X and 32
bits of W per cycle. The widths of the other inputs follow from that:

* **8-bit modes.** The byte on the wires is one whole element. It bypasses the
  link register, and the operation completes in one beat.
* **4-bit modes.** A CSM needs four 4-bit elements, which is 16 bits per
  operand. The first beat is held in the link register. The second beat
  completes the word `{beat1, beat0}`. Every wire carries useful bits in every
  cycle in both modes.

Bus layout (`c` = CSM 0..3, `i` = lane 0..15):

| bus                  | 8-bit modes            | 4-bit modes |
|----------------------|------------------------|-------------|
| `sig_x/sig_w[8c+:8]` | element c              | beat 0: `{lane 4c+1, lane 4c}`; beat 1: `{lane 4c+3, lane 4c+2}` (4 bits each) |
| `exp_x/exp_w`        | `[8c+:8]` for lane c   | `[4i+:4]` for lane i |
| `sign_x/sign_w`      | bit c                  | bit i |

FP significands are sent with the hidden bit in place: `1.mmmmmmm` in 8 bits
for bfloat16, `1.mmm` in 4 bits for FP8. A zero element is significand 0 with
exponent 0. Subnormals, infinities and NaN are not given special treatment.
In the 4-bit modes, the exponents, signs, shared exponents and `mode` are read
on the second beat.

### Modes and activation

The original design power-gates the sub-modules a mode does not use. This RTL
models that with operand isolation: `mode_ctrl` drives the enables, and a
disabled block sees constant inputs. Real power gating is a physical-design
step.

| mode        | XOR bundle | exponent calculators | normalizer/rounder | output path |
|-------------|------------|----------------------|--------------------|-------------|
| bfloat16    | on         | 4 (lanes 0–3)        | on                 | FP |
| FP8         | on         | all 16               | on                 | FP |
| INT8 / INT4 | off        | off                  | off                | INT |
| MXINT8 / 4  | off        | 1 (lane 15)          | on                 | FP |
| MXFP8       | on         | all 16               | on                 | FP |

Calculator bias per mode (the result exponent carries bias 127):

| mode     | bias |
|----------|------|
| bfloat16 | −127 |
| FP8      | +113 (that is, −2·7 + 127) |
| MXINT    | −127; the lone calculator adds the two shared exponents |
| MXFP8    | `sx + sw − 141`; the shared exponents ride in the bias |

The bias input is 9 bits signed. The MXFP8 bias is clipped to that range, so
MXFP8 needs `sx + sw ≤ 396`. Element exponents of 4 bits use bias 7.

## Timing

* Two pipeline registers:
  * one after the exponent extractor and operand links (it holds the operand
    words, signs, shifts and `emax`);
  * one on the output.
* `out_valid` rises two clock edges after the edge that takes the completing
  beat.
* Throughput is one 4-product operation per cycle in the 8-bit modes, and one
  16-product operation every two cycles in the 4-bit modes. The mode may
  change between any two operations.
* Reset (`rst_n`) is asynchronous and active low.
* An assertion in `jack_unit` checks that the four operand links stay in step.

## Output corner cases

* Exponent above 254: saturates to the largest finite value, `{sign, 0x7F7F}`,
  and sets `out_sat`.
* Exponent of 0 or below: flushes to a signed zero and sets `out_flush`.
* Zero sum: gives +0.
* INT modes: the 21-bit sum is saturated to INT16 (`out_sat`). Four INT8
  products can reach 65536.
* Mantissa: truncated (rounded toward zero).

## Where this departs from, or goes beyond, the original description

* **FP16 output.** The description calls the FP output "FP16" but gives the
  exponent path 8 bits. This RTL uses the 8-bit exponent, i.e. bfloat16
  layout.
* **MXFP8 elements.** They are read as {s:1, e:4, m:3}, grouped with the 4-bit
  modes. One passage gives MXFP8 a 7-bit mantissa.
* **MXINT elements.** Treated as plain integers scaled only by the shared
  exponents. A fixed-point element scale can be folded into those exponents.
* **Widths.** Exponents are 10 bits signed internally, where 9 bits are
  quoted, so out-of-range values can be detected rather than wrapping. Every
  adder has one extra sign bit.
* **Choices the description does not fix:**
  * register placement, beat order, bus layout;
  * sign handling (each aligned sub-product is negated before the tree);
  * truncation of shifted-out bits;
  * clamping and INT16 saturation;
  * the `int_signed` input;
  * which calculator serves the MX integer modes.
* **Products per operation.** One operation delivers 4 products in the
  8-bit modes and 16 in the 4-bit modes, as the unit's own description
  states. A 4-bit operation needs two link beats, so per cycle the 4-bit
  modes give 2x the bfloat16 product rate. The accelerator-level figures
  quoted elsewhere imply more: 16x as many multipliers for INT4 as for
  bfloat16, i.e. 256 4-bit products per unit. This RTL does not reach that
  count.
* **The surrounding accelerator** — a 32×32 systolic array of these units with
  512/512/256 KB input/weight/output buffers, accumulators, control and HBM —
  is not included. Only its size and capacities are known. Its dataflow and
  the way unit outputs are combined are not.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`jack_ref_pkg` is a loop-based reference model of the whole unit, plus an
exact real-valued model.

* Small blocks are checked exhaustively (`tb_sub_multiplier`,
  `tb_barrel_shifter`) or with random vectors against integer formulas.
* `tb_reconstructed_csm` checks the array's sum against a nibble-by-nibble
  loop, in both widths, signed and unsigned, with random shifts and signs.
* `tb_jack_unit` streams 20,000 random operations across all seven modes,
  mostly back to back, with frequent mode switches. It also runs directed
  cases for exponent overflow, flush to zero, INT16 saturation, cancellation
  and carry-out. Each result is checked bit-exactly against the reference
  model, its latency must be exactly 2, and FP results must lie within the
  truncation bound of the exact value. The testbench counts how often each
  mechanism occurred and fails if any never did.
* `tb_jack_workload` feeds the unit the 49-tap dot products of a 7x7
  depthwise convolution, as in the first block of a ConvNeXt-T style CNN. It
  runs 48 outputs in each of the seven modes. MX
  blocks hold 32 elements. The 16-bit unit results are summed in a
  real-valued accumulator in the testbench. Every unit result is checked
  bit-exactly. Every summed output must lie within 2^-6 of the exact dot
  product, taken relative to the sum of the product magnitudes. The mean
  errors measured with random data are:
  * bfloat16: 0.18%
  * FP8: 0.28%
  * INT8 and INT4: exact
  * MXINT8: 0.05%
  * MXINT4: 0 (no partial result needed more than 8 significant bits)
  * MXFP8: 0.37%

Running a testbench with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/jack_pkg.sv tb/jack_ref_pkg.sv tb/tb_jack_unit.sv --top-module tb_jack_unit
./obj_dir/Vtb_jack_unit
```

Use the same command for any other `tb_*.sv`. Every module in `rtl/` also
lints cleanly as its own top with `verilator --lint-only -Wall`; only
unused-bit warnings remain.
