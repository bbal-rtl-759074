# BBAL: a bidirectional block-floating-point accelerator for LLM inference

Block floating point (BFP) saves area and memory by giving a whole block of
numbers one shared exponent. Each element then keeps only a short integer
mantissa. The weakness is alignment. Every element is shifted right onto the
block's largest exponent, so small elements lose their bits, and a short
mantissa makes that loss large.

*Bidirectional* BFP, written BBFP(m,o), adds one **flag** bit per element
and puts the shared exponent a little *below* the block maximum. Elements
above it are shifted left, and elements at or below it are shifted right.
The flag says which of two overlapping mantissa windows the element's m bits
came from. Large elements keep their top bits, and small elements lose fewer
bits than in plain BFP. The cost is one bit per element and a slightly wider
multiplier-accumulator.

The RTL here builds an accelerator around this format. It contains:

* a 4x4 weight-stationary systolic array that multiplies BBFP(6,3)
  activations by BBFP(6,3) weights. Its partial-sum adders are deliberately
  narrow because of the structure of BBFP products.
* FP16 encoders and adders that combine results whose shared exponents
  differ.
* a max unit and an output encoder that re-encodes results into BBFP.
* a nonlinear unit for softmax, sigmoid, SiLU and GELU. It works in BBFP(10,5)
  and uses lookup tables that are fetched per shared exponent from external
  memory.

Everything is SystemVerilog-2017 and synthesizable, except the testbenches
and the external memory model in `tb/`.

## 1. The BBFP(m,o) number format

A block of FP16 values (11-bit significand with the hidden one, and a 5-bit
biased exponent E) becomes:

* one shared 5-bit exponent `es = max(E) - (m - o)`, clamped at 0;
* per element, a sign, a flag and an m-bit mantissa.

To encode an element with exponent `e`:

| case       | flag | shift of the significand | bits kept (of the shifted 11-bit significand, bit 10 = hidden one) |
|------------|------|--------------------------|------------------------------------------|
| `e <= es`  | 0    | right by `es - e`        | bits 10 .. 11-m (the *low* window)       |
| `e > es`   | 1    | left by `e - es` (at most m-o) | bits 10+(m-o) .. 11-o (the *high* window) |

The two windows overlap by `o` bits. Bits outside the window are
**truncated**; there is no rounding. The element's value is

    value = (-1)^sign * mant * 2^((m-o)*flag) * 2^(es - 15 - (m-1))

The low window is therefore the usual BFP mantissa. The high window has the
same width but sits `m-o` bits higher. Because `es = max - (m-o)`, the
largest element always gets flag 1 with its leading one at the top of the
high window, so it loses no top bits.

Worked example for BBFP(4,2):
* The block maximum exponent is 21, so es = 19.
* An element `1.01b x 2^(21-15)` is shifted left by 2 and becomes flag 1,
  mantissa 1010.
* An element `1.001b x 2^(17-15)` is shifted right by 2 and becomes flag 0,
  mantissa 0010.

`tb_bbfp_encoder` checks exactly this case.

Choices of this implementation:
* Subnormal FP16 inputs are treated as exponent 1 without a hidden one.
* Inf and NaN are not special-cased.
* The block is a 4x4 tile of 16 values, which is the tile the array
  consumes. (A block size of 32 elements also appears in the format
  comparison of the source material; the accelerator's data flow uses 4x4.)

## 2. Multiplying and accumulating BBFP elements

### Product (`bbfp_mul`)

The product of two elements is `mant_a * mant_b * 2^(k)` with
`k = (m-o)*(flag_a + flag_b)`, so k is one of {0, m-o, 2(m-o)}. The
multiplier does not build a shifted product of up to `2m + 2(m-o)` bits.
Instead it outputs the product in compressed form:
* a 2-bit flag `{flag_a, flag_b}`;
* the sign;
* the 2m-bit product of the mantissas.

The shift is applied only where the product meets the partial sum.

### Sparse partial-sum adder (`bbfp_psum_adder` + `carry_chain`)

The partial sum is an ACC_W-bit two's-complement integer. ACC_W is 21 for
BBFP(6,3) in a 4-row array, so four worst-case products cannot overflow.
Adding a product shifted by k touches three regions:

1. **Bits below k.** They are unchanged and pass straight through.
2. **The 2m-bit window at bit k.** A 2m-bit adder (a subtractor for
   negative products) combines the window with the product. A 3:1 mux,
   steered by the two flags, selects the window.
3. **Bits above the window.** They can only receive the adder's carry (or,
   when subtracting, a borrow). A carry chain handles them. Each bit is
   `S = C xor A` and `C' = C and A`, or with borrow `C' = C and not A`. That
   is a half-adder per bit instead of a full adder.

The result is bit-identical to `psum + (±mant << k)`.
`tb_bbfp_psum_adder` checks this against a plain integer reference.

Design choice: the partial sum is two's complement, and negative products
are subtracted in the window. The carry chain is then a borrow chain for
those products, selected by the `dec` input.

## 3. The PE array (`pe`, `pe_array`)

The array is weight-stationary, with ROWS x COLS = 4 x 4 PEs.

**Loading weights.** A weight tile is one BBFP(6,3) block: an exponent plus
16 elements. `w_load` preloads it into all PEs in one cycle. Weight row r
holds input index r, and column c holds output index c.

**Streaming activations.** Activation vectors (4 elements of one BBFP block)
enter one per cycle. Row r is delayed r cycles (input skew). Activations
move right and partial sums move down. Column c therefore produces
`sum_r a[r] * w[r][c]` as a 21-bit integer. Output registers undo the skew,
so a whole result vector leaves together.

**Latency.** A vector presented in cycle t leaves in cycle t+7
(ROWS+COLS-1). A new vector can enter every cycle.

**Exponents.** All elements of a block share one exponent, so only one
exponent addition is needed per tile.
* PE (0,0) is the one *type (1)* PE. It registers
  `a_exp + w_exp`.
* Every other PE is *type (2)*. It passes the exponent through a bypass,
  with no adder.
* The sum travels down column 0 as `out_exp`.

The value of result column c is `out_psum[c] * 2^(out_exp - 2*(15 + m - 1))`.

Restriction: a new activation exponent or weight tile may only follow once
the previous tile has drained. The exponent is one register, not a pipeline.

## 4. Accelerator top (`bbal_top`)

### Interface

* **Buffer fill.** The `ib_*` and `wb_*` ports write the buffers:
  * input buffer: `IB_DEPTH` = 64 tiles, each 16 FP16 values (4 activation
    vectors x 4 values);
  * weight buffer: `WB_DEPTH` = 64 tiles, each a pre-encoded BBFP(6,3)
    block (`wtile_t`).
* **Command.** The `cmd_valid`/`cmd_ready` handshake takes a command with:
  * `cmd_ibase` and `cmd_wbase`: the first activation and weight tile;
  * `cmd_ktiles`: the number of K-steps;
  * `cmd_nl_en` and `cmd_nl_op`: whether the result goes through the
    nonlinear unit, and which operation (softmax, sigmoid, SiLU or GELU).

  The command computes a 4 x 4 result `Y = X * W` with K = 4·ktiles.

### Per K-step

1. Read one weight tile and preload it into the array. Read one activation
   tile. The **input encoder** (`bbfp_encoder`, N=16) turns the activation
   tile into one BBFP(6,3) block.
2. Stream the 4 activation vectors through the array. Collect the 4 result
   vectors (integers plus exponent) in the **output buffer**.
3. Convert each result to FP16 with the **FP encoders**. Add it to the
   running FP16 sum with the **FP adders** (the first K-step just stores).
   The K-steps have different shared exponents, so this sum must be
   floating point.

### After the last K-step

1. The **max unit** scans the 4 result vectors. It gives:
   * the largest value, which appears on `res_max`;
   * the largest FP16 exponent.
2. The **data selector** sends the 16 results to one of two places:
   * the **nonlinear unit** (`cmd_nl_en = 1`). It also receives the max
     unit's largest exponent and largest value, so its Align stage needs no
     comparators (see section 5). Its FP16 output appears on `nl_out_*`.
   * the **output encoder** (`cmd_nl_en = 0`). This is a `bbfp_encoder`
     with `EXT_MAX=1`. It takes the largest exponent from the max unit
     instead of running its own comparator tree. Its BBFP(6,3) block appears
     on `enc_out_*`.
3. `done` pulses.

### Timing

At default parameters:
* a K=4 command without the nonlinear unit takes 25 cycles;
* the largest command, K=256 (64 K-steps), takes about 1220 cycles, about
  19 cycles per K-step. Weight load, feed, array drain and FP accumulation
  of one K-step do not overlap the next;
* commands through the nonlinear unit take roughly 225–280 cycles. Most of
  that is the 129-word sub-table load from external memory.

### Choices of this implementation

* K-steps run back to back without overlapping the next weight load.
* FP16 is used between the array and the nonlinear unit, with truncation.
* Overflow saturates to ±65504.
* The buffer depths, the command format and the external memory ports are
  this design's own.
* External memory itself is not part of the RTL.

## 5. Nonlinear unit (`nonlinear_unit`)

### Lookup tables segmented by exponent

A single table indexed by a full FP16 value would be far too large. Here the
function's input range is instead split by exponent.

**Where the tables live.** Each function has one sub-table per possible
shared exponent. The sub-tables sit in external memory. A word address is
`{fn[1:0], exponent[4:0], index[7:0]}`:
* word 0 is a header. Its low 5 bits give the shared exponent `L` of the
  table's values.
* words 1..128 are the entries. Each entry is one 12-bit BBFP element
  `{sign, flag, mant[9:0]}`.

**Loading and lookup.**
1. The align unit converts the 16 inputs to one BBFP(10,5) block. It also
   gives the integer value of each element and the block maximum, which the
   SUB unit needs for softmax. Stand-alone (`EXT_MAX=0`), it finds the
   maximum exponent and maximum value with its own comparators. Inside the
   accelerator (`EXT_MAX=1`), it takes both from the max unit. It then
   encodes the maximum value with a one-lane encoder under the same shared
   exponent. Encoding is monotonic, so the result equals the largest lane
   value exactly.
2. The block's shared exponent picks the sub-table. The **DMA** (`nl_dma`)
   copies it into the **LUT file** (`lut_file`: 128 x 12 bits plus the
   exponent register, with 16 parallel read ports).
3. Each lane looks up its entry with a 7-bit address made directly from its
   BBFP code: `{sign, flag, mant[9:5]}`. No float-to-index conversion is
   needed.

Because the entries are BBFP elements under the table exponent L, the result
of a lookup is still BBFP and goes straight into integer arithmetic.

### Table contents

The tables are computed offline. The entry for address `{s, f, m5}` is the
function evaluated at the centre of the bucket that address covers:
`x = ±(32*m5 + 16) * 2^(5f) * 2^(es - 24)`.

| function | table holds          | data flow                                     |
|----------|----------------------|-----------------------------------------------|
| softmax  | e^d, for d = x - max <= 0 | Align → SUB (x - max) → LUT → adder tree (Σ) → Div (e^d / Σ) → FP16 |
| sigmoid  | 1 + e^-x             | Align → LUT → Div (1 / y) → FP16              |
| SiLU     | sigmoid(x)           | Align → LUT → Mul (x · y) → FP16              |
| GELU     | Φ(x), Gaussian CDF (tanh form) | Align → LUT → Mul (x · y) → FP16    |

While the SUB unit works, the DMA fetches the sub-table. This hides most of
the memory latency behind the subtraction. Each stage ends in a register
buffer.

The **control unit** in `nonlinear_unit` is two state machines. Each
handles one section of the pipeline:

* **Front end.** States IDLE, ALIGN, SUB, WAIT (for the DMA) and LUTQ.
  Covers alignment, subtraction, the sub-table load and the lookup.
* **Back end.** States SUM, CALC and ENC. Covers the adder tree,
  division or multiplication, and FP16 encoding.

After its lookup, a vector moves to the back end. It takes copies of its
opcode, shared exponent, input values and table exponent with it. The
front end then accepts the next vector straight away. That vector's
alignment and sub-table load overlap the previous vector's arithmetic.

A vector cannot overlap further than this. There is only one LUT file, so
a new sub-table cannot be loaded before the previous lookup is finished.
The unit uses an `in_valid`/`in_ready` handshake. Results come out in
order, each with a one-cycle `out_valid`.

### Accuracy and its limits

* **Softmax range.** The SUB unit saturates a difference `x - max` that
  is larger than the block's range. The limit is `2^(2M-O)` units, which is
  between 1x and 2x the block's largest magnitude. The difference then looks
  up the table's last bucket, at about -1x to -2x that magnitude, instead
  of a value near zero. This only happens when negative inputs lie far
  below the maximum.
* **Softmax.** The quotient keeps QF=15 fraction bits. Softmax is
  normalised over the 16 values of one block. Longer rows would need a
  running maximum and sum across blocks, which this unit does not have.
* **Shared table exponent.** Each sub-table shares one exponent L among its
  128 entries. Where a function spans a wide range within one sub-table,
  small entries lose relative precision, because the largest entry sets the
  exponent.
* **Measured accuracy.** The testbench tables are computed from the formula
  above. Against a real-valued reference, the worst absolute errors are
  about 0.03 (softmax), 0.004 (sigmoid, |x| < 1), 0.016 (SiLU) and 0.017
  (GELU). The
  sigmoid test is kept to |x| < 1 because 1 + e^-x grows quickly for
  negative x, and the table's common exponent then wipes out the small
  entries.
* **Lookup resolution.** Only the top 5 mantissa bits address the table, so
  each lookup is piecewise-constant over 1/32 of the block's range.

## 6. Departures from the described design, and open points

* **Block size.** This design uses 16 elements (a 4x4 tile) everywhere on
  the linear path. A block size of 32 is also quoted for BBFP(6,3), but
  32-element blocks do not map onto a 4x4 array.
* **Limited overlap.** The nonlinear unit overlaps only two pipeline
  sections, front end and back end, because it has one LUT file. The top
  does not overlap weight loading with computation.
* **Long softmax rows.** Softmax over rows longer than 16 values, and
  combining partial sums of reductions longer than `4*IB_DEPTH` on chip,
  are not supported. Linear layers of real LLM sizes (K in the thousands)
  would need larger buffers, or an output path that returns unencoded FP16
  partial sums.
* **SiLU and GELU data flow.** Both are named as functions the unit can
  compute, without a data flow. The table-then-multiply flow used here
  (sigmoid or Φ table, then the Mul unit) is this design's own.
* **Rounding and special values.** Everything truncates. There is no
  round-to-nearest, and no Inf or NaN anywhere.
* **Signed arithmetic.** Partial sums are two's complement, not sign plus
  magnitude.
* **LUT address mapping.** The 7-bit address layout, the sub-table layout
  in memory and the DMA handshake are this design's choices.

## 7. Files

`rtl/`:

| file | contents |
|------|----------|
| `bbal_pkg.sv` | widths, tile types (`itile_t`, `wtile_t`, `otile_t`), `nl_op_e` |
| `bbfp_encoder.sv` | FP16 block → BBFP(m,o) (input encoder, output encoder, align unit core) |
| `bbfp_mul.sv`, `bbfp_psum_adder.sv`, `carry_chain.sv` | BBFP MAC datapath |
| `pe.sv`, `pe_array.sv` | PE types (1)/(2) and the 4x4 array |
| `fp_encoder.sv`, `fp_adder.sv` | scaled integer → FP16, FP16 adder |
| `max_unit.sv`, `sram_buf.sv` | max unit, buffers |
| `nl_align.sv`, `nl_sub_unit.sv`, `lut_file.sv`, `nl_dma.sv`, `adder_tree.sv`, `nl_mul_unit.sv`, `div_unit.sv` | nonlinear unit stages |
| `nonlinear_unit.sv` | nonlinear unit with its control FSM and output encoders |
| `bbal_top.sv` | the accelerator |

`tb/`:

* `tb_<module>.sv` is the testbench for each module. Each is self-checking
  against a reference computed independently in real arithmetic or plain
  integers. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.
* `bbal_tb_pkg.sv` holds the shared reference functions: FP16 ↔ real and
  the BBFP encoding rule.
* `lut_mem_model.sv` is a behavioural external memory. It generates the
  sub-tables from the formula above. It has random request stalls and a
  fixed read latency.

`tb_bbal_top` runs the whole accelerator at its default parameters. It runs
12 commands with K = 4..16, mixing:
* the output-encoder path;
* softmax, sigmoid, SiLU and GELU.

It checks the BBFP output bit-exactly against a reference model, and the
nonlinear outputs within tolerance. It also counts each mechanism and fails
if one never occurred:
* high and low mantissa groups;
* negative products (borrow chain);
* FP accumulation across K-steps;
* sub-table loads;
* memory stalls;
* each nonlinear operation (softmax, sigmoid, SiLU, GELU);
* the output-encoder path.

`tb_wl_llm_linear` is a workload slice. It models an LLM linear layer with
the longest reduction one command supports: K = 256, all 64 buffer tiles.
It runs three commands:
* a plain projection, re-encoded to BBFP(6,3);
* the same projection followed by SiLU;
* the same projection followed by GELU.

Besides the bit-exact checks, it compares every result with the exact
real-valued product of the FP16 activations and the weights. The observed
error is about 0.6% of `sum |a*w|`, against a limit of 3%. It also bounds
the command time at 20 cycles per K-step. The data are random, not taken
from real model weights.

## 8. Simulating

Any testbench is compiled with the package files first, for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/bbal_pkg.sv tb/bbal_tb_pkg.sv tb/tb_bbal_top.sv \
        --top-module tb_bbal_top -Mdir obj_tb_bbal_top -o sim
    ./obj_tb_bbal_top/sim

Verilator finds the remaining modules through `-Irtl -Itb`. Each testbench
finishes within a few seconds to a minute. To vary the arithmetic, change
M/O on the BBFP blocks; the testbench references follow the parameters.
The top's data widths come from `bbal_pkg`. The pass criterion is
`failures=0` in the last line.
