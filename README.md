# IF4 block multiply-accumulate unit

IF4 ("Int/Float 4") is a 4-bit block-scaled number format. It stores data the way NVFP4 does:
groups of 16 four-bit elements share one 8-bit E4M3 scale factor. NVFP4 elements carry their own
sign, so the scale factor's sign bit is never used. IF4 uses that spare bit as a per-block
**indicator**:

| indicator | the 16 elements are | element values |
|-----------|---------------------|----------------|
| 0 | FP4 (E2M1) | ±{0, 0.5, 1, 1.5, 2, 3, 4, 6} |
| 1 | INT4, scaled by 6/7 | {−7 … 7} × 6/7 |

The quantizer picks, per block, whichever form represents the block with less squared error. FP4
suits blocks that hold one large value and many small ones. Evenly spread blocks do better with
INT4, whose quantization error is the same across the whole range. INT4 blocks are stored
multiplied by 7/6 before rounding, so their largest code (7) covers the same range as FP4's
largest value (6). Hardware that consumes IF4 must undo this by multiplying by 6/7. Because of
that, both kinds of block share the full E4M3 scale range, and IF4 costs no storage beyond NVFP4.

This repository holds synthesizable SystemVerilog for an IF4 multiply-accumulate (MAC) unit. Each
cycle it takes one block of 16 weights and one block of 16 activations, each block with its own
scale factor, and adds their scaled dot product to an FP32 running sum:

    result += Σ_i  dec(w_i, ind_w) · dec(a_i, ind_a)  ·  |S_w| · |S_a|  ·  k(ind_w, ind_a)

    k = 1      both blocks FP4
    k = 6/7    exactly one block INT4
    k = 36/49  both blocks INT4

Here `dec` is the element decoder, `S_w` and `S_a` are the E4M3 scale factors (read without their
sign bit), and `k` is the **range-alignment** factor.

## Datapath

```
 w_codes[16] ──► if4_decoder ─┐                      ┌──────── ×BLOCK_SIZE lanes (if4_lane) ────────┐
                              ├► product_mult ─FP16─►│reg│─► block_scaler ─FP32─► lane_accumulator ─┐ │
 a_codes[16] ──► if4_decoder ─┘   (Q4.1×Q4.1)        │   │        ▲ (FP16×FP32)       (FP32 +=)     │ │
                                                     └────────────┼─────────────────────────────────┼─┘
 w_scale ─┐                                                       │                                 ▼
          ├► scale_mult ─FP32─► int4_align ─FP32─► │reg│ ─────────┘ broadcast            final_adder ─► result
 a_scale ─┘  (E4M3×E4M3)        (×1, ×6/7, ×36/49)                                     (16-input FP32 sum)
   bit 7 of each scale = indicator ──► decoders and int4_align
```

The design splits the work into two paths that meet at the scaling multiplier.

**Element path.** There are 16 identical lanes, one per element. In each lane:

- `if4_decoder` turns each 4-bit code into a signed Q4.1 fixed-point word: 5 bits, two's
  complement, value = raw/2. FP4 codes go through an eight-entry lookup table, because their
  values are unevenly spaced. INT4 codes are shifted left by one place. Q4.1 holds every FP4
  value and every INT4 value.
- `product_mult` multiplies the two Q4.1 words as integers. The product has at most 9
  significant bits, so it is packed into FP16 exactly.

**Scale path.** This path runs once per block, not once per element. `scale_mult` multiplies the
two 7-bit E4M3 magnitudes. Two 4-bit significands give an 8-bit product, so the FP32 result is
exact. `int4_align` then applies the range-alignment factor with one FP32 multiply: it passes the
scale through unchanged, or multiplies it by the FP32 constant 6/7 or 36/49. The indicators
choose which.

**Meeting point.** The aligned scale is broadcast to all lanes. In each lane, `block_scaler`
widens the FP16 product to FP32 and multiplies it by the scale. `lane_accumulator` then adds the
result to the lane's FP32 sum. `final_adder` adds the 16 lane sums into `result`.

Handling the scale once per block keeps the per-element hardware small. The lanes only ever see
exact small products. All rounding happens in the FP32 scale multiply, the range-alignment
multiply, the per-lane scaling multiply, the accumulation and the final sum.

## Number formats

| item | encoding |
|------|----------|
| FP4 element (E2M1) | bit 3 sign; bits 2:0 → 0, 0.5, 1, 1.5, 2, 3, 4, 6 |
| INT4 element | two's complement. A quantizer never emits 1000 (−8), so positive and negative errors stay symmetric; the decoder still reads it as −8 |
| scale factor | bit 7 indicator, bits 6:3 exponent (bias 7), bits 2:0 significand (E4M3; exponent 0 is subnormal, 1111.111 is NaN, largest value 448). Example: `0 1011 110` = 1.75 × 2⁴ = 28 in an FP4 block |
| decoded element | Q4.1, 5-bit two's complement, range −8 … 7.5 |
| element product | IEEE binary16, always exact |
| scale, scaled products, sums | IEEE binary32 |
| 6/7, 36/49 | `32'h3F5B6DB7`, `32'h3F3C14E6` (each ratio rounded to nearest even) |

The types and constants are in `if4_pkg`. A scale factor is the packed struct `if4_scale_t`
with fields `{ind, exp, man}`.

## Interface and timing of `if4_mac`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset that clears every register and accumulator |
| `in_valid` | in | 1 | a block is presented this cycle |
| `in_clr` | in | 1 | start a new accumulation. With `in_valid`, the sum restarts from this block. Without it, the sum becomes 0 |
| `w_codes`, `a_codes` | in | 16 × 4 | weight and activation elements; element i is `[i]` |
| `w_scale`, `a_scale` | in | 8 (`if4_scale_t`) | scale factors with their indicators |
| `out_valid` | out | 1 | `result` now includes a block presented two cycles earlier |
| `result` | out | 32 | FP32 sum of everything accumulated since the last clear |

The unit has two pipeline stages and no stalls. A block presented in cycle *t* is sampled at the
edge ending cycle *t*, when its products and its aligned scale are registered. It is accumulated
at the edge ending cycle *t+1*. `result` reflects it from then on, and `out_valid` is high for
one cycle. So the latency is two cycles and the throughput is one block per cycle. At a 500 MHz
clock that is 16 multiply-adds per 2 ns, or 16 GFLOPS, with a 4 ns latency. `result` comes
combinationally from the lane accumulators through the final adder tree, so it has no register
of its own. `in_clr` travels down the pipeline with its block. A clear issued with a block
therefore never cuts off a block that is still in flight.

`BLOCK_SIZE` (default 16) sets the number of lanes. It is the only parameter of the top.

## Rounding and special values

Every FP32 multiply and add rounds to nearest, with ties to even. Subnormal inputs are read as
zero, and results below the normal range are flushed to zero. Neither case can occur from valid
IF4 inputs:

- the smallest non-zero scaled product is 0.25 × 2⁻¹⁸ × 36/49, about 2⁻²¹;
- differences of such values remain normal.

An exact cancellation gives +0. An E4M3 NaN scale factor (`x1111111`) makes the block's scale
NaN, and that NaN then stays in the accumulators until they are cleared. FP32 overflow gives
infinity.

The adder tree pairs neighbours: level 1 adds (0,1), (2,3), …, level 2 adds the results in
pairs, and so on. An odd node left over passes through to the next level. FP32 addition is not
associative, so a different order or a single wide adder would give results that differ in the
last bits.

## Which parts follow the published IF4 MAC and which are this design's own

These parts follow the published IF4 MAC architecture:

- 16 elements per block, and 16 parallel lanes;
- decoding by lookup table for FP4 and by shifter for INT4, into Q4.1;
- element products in FP16;
- a separate scale path that multiplies the two scale factors into one FP32 unified scale;
- range alignment by 1, 6/7 or 36/49 in FP32;
- FP16 × FP32 block scaling;
- per-lane FP32 accumulation;
- a final sum of the lanes;
- a two-cycle latency at 500 MHz.

These choices are this design's own:

- the `in_valid`/`in_clr` handshake and the synchronous clear (the published unit mentions only a
  reset that clears the accumulator);
- where the single pipeline register sits;
- the exact Q4.1 encoding (read here as two's complement with the sign among the four integer
  bits);
- the FP4 bit layout;
- one shared FP32 multiplier in the range-alignment stage, with 36/49 rounded once rather than
  6/7 applied twice;
- the rounding mode and subnormal flushing;
- the shape and order of the final adder tree.

Not included:

- **A quantizer.** The choice between FP4 and INT4 per block is a software step that happens
  before data reaches the MAC.
- **IF3 and IF6 variants.** They use 3- or 6-bit elements and other alignment factors (4/3; 7.5/31
  or 28/31). Extending the design to them means new decoders and new constants.
- **A plain NVFP4 MAC.** The published work uses one only as a baseline.

The RTL has been simulated, not timed. No claim is made that it closes at 500 MHz, or that it
matches the published area (0.040 mm²) or power (14.4 mW) in 28 nm.

## Files

`rtl/` (one module or package per file):

| file | contents |
|------|----------|
| `if4_pkg.sv` | shared types (`fp32_t`, `fp16_t`, `q41_t`, `if4_scale_t`), constants, exact FP16→FP32 widening |
| `if4_decoder.sv` | FP4 lookup table / INT4 shift into Q4.1 |
| `product_mult.sv` | Q4.1 × Q4.1 → exact FP16 |
| `scale_mult.sv` | E4M3 × E4M3 → exact FP32 |
| `int4_align.sv` | range alignment ×1 / ×6/7 / ×36/49 |
| `block_scaler.sv` | FP16 × FP32 → FP32 |
| `lane_accumulator.sv` | FP32 running sum with clear |
| `if4_lane.sv` | one element lane (decoders, product, pipeline register, scaler, accumulator) |
| `final_adder.sv` | N-input FP32 adder tree (parameter `N`) |
| `if4_mac.sv` | top level |
| `fp32_mul.sv`, `fp32_add.sv` | general FP32 multiplier and adder used by the blocks above |

`tb/`: one self-checking testbench `tb_<module>.sv` per block, plus `tb_fp_pkg.sv`. That package
is the reference arithmetic: it computes in double precision and rounds each result to FP32 by
round-to-nearest-even, which for a single multiply or add gives the correctly rounded FP32 result.
It decodes elements and scale factors from the format definitions, not from the RTL's tables.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a watchdog ends it if it
hangs. For example, the full unit at its default size:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_if4_mac \
    rtl/if4_pkg.sv tb/tb_fp_pkg.sv tb/tb_if4_mac.sv
./obj_dir/Vtb_if4_mac
```

Replace `if4_mac` with any other module name to run that block's testbench. Verilator finds the
other files through `-I`, because every file is named after the module it holds.

What the testbenches check:

| testbench | checks |
|-----------|--------|
| `tb_if4_decoder` | all 16 codes as FP4 and as INT4 |
| `tb_product_mult` | all 1024 Q4.1 input pairs; the product must be exact and normal |
| `tb_scale_mult` | all 128 × 128 scale-magnitude pairs, including subnormals and NaN, plus the example 28 × 1 |
| `tb_int4_align` | random scales under all four indicator pairs, bit-exact; 7 × 6/7 ≈ 6 |
| `tb_block_scaler` | random products × random scales, bit-exact |
| `tb_lane_accumulator` | random stream with enable, clear and an asynchronous reset, bit-exact every cycle |
| `tb_final_adder` | 16-input and 5-input trees on random and cancelling inputs, bit-exact |
| `tb_if4_lane` | random lane traffic, bit-exact every cycle, including the two-edge timing |
| `tb_if4_mac` | end to end at the default size (below) |

`tb_if4_mac` runs three tests:

1. **Worked example.** The group [6, 18, 36, 42] is stored as INT4 codes [1, 3, 6, 7] with scale
   7.0. Multiplied by activations of 1.0, it must give 102.
2. **Latency.** A single block must not appear after the first clock edge, and must appear after
   the second.
3. **Random stream.** 3000 cycles with random gaps, clears, codes, scales and indicators. Every
   cycle the result is compared bit for bit with the reference model, and with the exact
   real-valued dot product to a relative tolerance of 10⁻⁵.

It also counts how often each mechanism occurs and fails if one never does: FP4×FP4
pass-through, 6/7 alignment, 36/49 alignment, a clear with a block, a clear alone, back-to-back
blocks, idle cycles and negative results.

`tb_if4_dot_workload` runs whole dot products through the MAC, of length 1024 and 2816. These are
the hidden and intermediate sizes of a 340M-parameter transformer of the kind IF4 was trained on.
It first generates normal or uniform data and quantizes each group of 16 with a behavioural IF4
quantizer written inside the testbench:

- take the E4M3 scale as max|x|/6, rounded to E4M3;
- round each scaled value to FP4, and separately round it × 7/6 to INT4 (±7);
- keep whichever of the two has the lower squared error.

The blocks then stream through the MAC back to back. The test checks the result against the exact
dot product of the dequantized vectors. It checks that the last block lands K/16 + 1 clock edges
after the first. It also checks that both formats were chosen at least once. The per-tensor FP32
scale of the format is left out because it is a constant applied outside the MAC.
