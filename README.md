# M2XFP compute engine in SystemVerilog

Microscaling (MX) formats store a tensor as groups of 32 four-bit
floating-point values that share one power-of-two scale. In MXFP4 the largest
element of a group is usually the one that loses the most precision: the
shared scale is rounded down to a power of two, and the 1-bit mantissa of
E2M1 leaves that element badly quantized. **M2XFP** spends 8 extra bits per
group (0.25 bit per element) on metadata that repairs this:

* **Activations (Elem-EM).** Each group is split into 4 subgroups of 8. For
  each subgroup, the 2 metadata bits extend the mantissa of the subgroup's
  largest element (its *top-1*). That element is then effectively an FP6
  (E2M3) value. The top-1 is not stored. Encoder and decoder both find it
  again from the FP4 codes, using the same deterministic rule.
* **Weights (Sg-EM).** The same 2 bits per subgroup give the subgroup scale a
  mantissa. Each subgroup is multiplied by 1.0, 1.25, 1.5 or 1.75 on top of
  the shared E8M0 scale.

This repository holds synthesizable RTL for a compute engine built around
that format. It contains:

* a 32 x 32 FP4 dot-product array whose processing elements apply both kinds
  of metadata;
* the top-1 decode units that feed it;
* the on-chip activation, weight and output buffers;
* a small sequencer;
* the two-stage engine that quantizes each FP32 output row back into M2XFP
  (Elem-EM) on the fly.

A self-checking testbench accompanies every block. The end-to-end test runs
the engine at full size.

## 1. Data format and bit layout

One M2XFP group has three fields. Buffers keep them in three separate
arrays, so each field stays aligned:

| field | width | contents |
|---|---|---|
| elements | 128 | 32 FP4 E2M1 codes; element *j* is `elem[4j+3:4j]` |
| scale | 8 | E8M0 exponent; the group is scaled by 2^(scale-127) |
| metadata | 8 | 2 bits per subgroup; subgroup *i* is `meta[2i+1:2i]` |

Subgroup *i* is made of elements 8i .. 8i+7.

FP4 E2M1 magnitudes are 0, 0.5, 1, 1.5, 2, 3, 4 and 6. FP6 E2M3 magnitudes
run from 0 to 7.5 in steps of 1/8, 1/4 or 1/2, depending on the binade.

**How an activation's metadata is read.** Take the top-1's 3-bit FP4
magnitude code *c* and the 2-bit metadata *m*. The 5-bit number {c, m},
minus one, is the E2M3 magnitude code of the top-1. The sign stays the FP4
sign. Worked example: FP4 `0011` (1.5) with metadata `00` gives
`01100 - 1 = 01011`, which is 1.375.

**How it is written.** The quantizer rounds the top-1 to both FP4 and FP6
(E2M3). It adds 1 to the 5-bit FP6 magnitude code. It then clamps the result
into the window {c, 00} .. {c, 11} of the chosen FP4 code and keeps the low
two bits. So the extra precision can only move the value within the range
that its FP4 code already implies. Decoding never contradicts the FP4 value
that ordinary MXFP4 hardware would see.

**Which element is the top-1.** A 16-entry table maps each FP4 code to the
4-bit rank {magnitude, not sign}. On a tie, the lower index wins. As a
result, +v outranks -v, and +0 outranks -0. Encoder and decoder use the same
unit (`top1_decode_unit`), so they always agree on the index.

## 2. Engine organisation

```
            a_wr_*            w_wr_*
              |                 |
       +------v-----+    +------v-----+
       | activation |    |   weight   |   8192 groups each (144 KB)
       |   buffer   |    |   buffer   |
       +------+-----+    +------+-----+
              |                 | one weight group per array row
   4x top1_decode_unit          v
              |        +-------------------+
              +------->|  dpu_array 32 x 4 |<---- psum (0 or output buffer)
                       |  PE tiles (FP32)  |
                       +---------+---------+
                                 |  32 FP32 / cycle
                         +-------v-------+
                         | output buffer |  288 x 32 FP32 (36 KB)
                         +-------+-------+
                                 | drain
              o_data_o <---------+----> 32x fp32_to_fp16 -> quant_engine -> q_*_o
```

**Dataflow.** The array is weight-stationary. Each of its 32 rows is one
output column *n* and holds one weight group (32 FP4 weights of that column
over one K group). The row is split into 4 PE tiles, one per subgroup. Each
cycle, one activation group (one row *m* of the activation matrix, one K
group) is broadcast to all 32 rows. Row *n* then does the following:

1. It computes its group dot product.
2. It adds the result to the FP32 partial sum of output element (m, n). The
   sum is chained through the 4 tiles in a fixed order.
3. The array registers the new sum.
4. The sum is written back to output-buffer entry *m*.

One entry of the output buffer holds the 32 FP32 outputs of one activation
row.

**Command.** The engine starts on `start_i` and takes these arguments:
`m_i` rows, `kg_i` K groups, base addresses `abase_i` and `wbase_i`, and the
`acc_i` flag. It computes

    OUT[m][n] (+)= sum over g < kg of  ACT[abase + m*kg + g] . W[wbase + g*32 + n]

for m < m_i. With `acc_i = 0`, the first K group starts from zero. With
`acc_i = 1`, it starts from what the output buffer already holds. This lets
a reduction longer than one command can hold be split over several
commands.

Limits per command:

* m <= 288, the number of output-buffer entries.
* m * kg <= 8192, the activation buffer size.
* kg <= 256 (K <= 8192 elements), the weight buffer size divided by 32 rows.

**Dispatch sequence.** `dispatch_unit` runs these phases for each K group g:

* **LOADW**: 32 cycles. One weight group is loaded into each array row.
* **STREAM**: m cycles, one activation group per cycle. Activation reads
  return 1 cycle later. The output-buffer write-back happens 2 cycles after
  issue.

After the last K group:

* **WAIT**: 2 cycles.
* **DRAIN**: m cycles. Each output-buffer entry is sent out as FP32 on
  `o_*`, and also through FP16 conversion into the quantization engine.
* **FLUSH**: 3 cycles. Then `done_o` pulses.

A command therefore takes exactly **kg * (32 + m) + m + 6** cycles from
`start_i` to `done_o`. For example, the 288-row, 28-group test command takes
9254 cycles.

**Read-after-write.** In STREAM, group g reads entry *m*. Group g-1 wrote
that entry at least 32 cycles earlier, because the LOADW phase lies between
them. The write-back latency is 2 cycles, so no hazard logic is needed.

## 3. Top-1 decode unit (`top1_decode_unit`)

Each of the 8 FP4 codes goes through the rank table (`fp4_uint_lut`). A
three-level tree of `top1_comparator` cells (4, then 2, then 1) keeps the
larger rank, and the lower index on a tie. The unit outputs:

* the index;
* the FP4 code of the winner;
* its decoded FP6 code, {sign, {c, meta} - 1}.

The unit is combinational. The engine has four of them, one per subgroup of
the broadcast activation group. Their outputs go to all 32 rows of the array.

## 4. PE tile arithmetic (`pe_tile`)

One tile handles one 8-element subgroup. It is combinational. All arithmetic
before the FP32 conversion is exact.

1. **FP4 products.** FP4 values are integers in units of 1/2, so each of the
   8 products is an integer in units of 1/4. An adder tree sums them into
   `base`.
2. **Top-1 correction.** The activation top-1 really has the value
   FP6(top-1), not FP4(top-1). The tile adds W_top * dX, where
   dX = FP6 - FP4 in units of 1/8.
   * dX can be negative, because decoding subtracts 1. For example, 1.5
     becomes 1.375.
   * The tile therefore computes the exact signed difference. It does not
     treat dX as a number with a zero hidden bit.
3. **Fixed point.** The sum goes into a signed 32-bit fixed-point value with
   6 fraction bits (FXP32).
4. **Sg-EM refinement.** The weight's `sg_em` applies shift-and-add:
   P + sg_em[0] * (P >> 2) + sg_em[1] * (P >> 1). This gives x1, x1.25, x1.5
   or x1.75. With 6 fraction bits both shifts are exact.
5. **Dequantization.** Both shared scales are E8M0, so scaling is an
   exponent offset: scale_w + scale_x - 254 - 6. `fx_to_fp32` normalises
   the fixed-point value and applies this offset. It rounds to nearest even
   when more than 24 bits are significant.
6. **Accumulation.** `fp32_add` adds the result to the incoming partial sum:
   * IEEE single precision, round to nearest even;
   * subnormals flushed to zero;
   * overflow gives infinity.

The 4 tiles of a row are chained (tile 0 first). Each row result is
therefore the sum of 4 FP32 additions per K group, in that fixed order. The
testbenches model exactly this order.

## 5. Online quantization (`quant_engine`)

The engine is a two-stage pipeline that takes one 32-element FP16 group per
cycle. Its output has a latency of 2 cycles, at full throughput, with no
back-pressure.

**Stage 1: `scale_norm_unit`.**

1. *Max.* amax is the largest |x|. The 15 magnitude bits of FP16 compare
   as unsigned integers.
2. *Scale.* E = floor(log2 amax) - 2, where 4 is the largest power of two
   in FP4. The scale code is E + 127, clamped to 0..254. An all-zero group
   gets code 0.
3. *Normalise.* Each |x| / 2^E is produced by one right shift of the FP16
   significand. The result has 16 fraction bits plus a sticky bit.
4. *Round.* The same value is rounded to an FP4 code and to an FP6 code by
   `m2xfp_pkg::round_e2m`. Rounding is to nearest, and a value exactly
   halfway rounds toward zero. Out-of-range values saturate at 6.0 and 7.5.
   So 3.5 becomes 3 and 5 becomes 4: every value that lands on 4 lies in
   (3.5, 5].

**Stage 2: `encode_unit`.** Per subgroup:

1. A `top1_decode_unit` picks the top-1 from the FP4 codes.
2. A multiplexer takes that element's FP6 candidate.
3. +1 is added, the result is clamped to {c, 00} .. {c, 11}, and the low
   2 bits become the metadata.

The FP4 codes pass unchanged. Signs are copied from the input, so -0.0 is
kept as `1000`.

**Output path.** In the engine, every drained FP32 row first goes through
`fp32_to_fp16`, because the quantizer takes FP16:

* rounding to nearest even;
* FP16 subnormals kept;
* saturation to +-65504 instead of infinity, so the group maximum stays
  finite;
* FP32 subnormals become zero.

The quantized row appears on `q_*_o` 2 cycles after its FP32 form appears on
`o_*_o`, tagged with its row number.

## 6. Buffers (`mx_buffer`, `output_buffer`)

Each buffer has one write port and one read port, with a registered read
(1-cycle latency). Contents are not reset.

* **`mx_buffer`** holds the three group fields in three arrays. The default
  depth is 8192 groups: 18 bytes per group makes 144 KB. The engine has one
  for activations and one for weights.
* **`output_buffer`** has 288 entries of 32 FP32 values (36 KB). It is the
  accumulator store of the array.

Synthesis infers all three as memories.

## 7. What follows the source and what is this design's choice

Taken from the M2XFP description:

* the format: group 32, subgroup 8, E8M0 scale, 8 metadata bits;
* the Elem-EM encoding (+1, clamp, keep 2 bits) and decoding (-1);
* the FP4 rank table and the lowest-index tie rule;
* the three-level comparator tree;
* the Sg-EM multipliers 1.0, 1.25, 1.5 and 1.75, built from shifts;
* the 32-bit fixed-point partial sum;
* dequantization as an exponent offset followed by FP32 accumulation;
* the two-stage quantization engine;
* the 32 x 32 array of 128 PE tiles with 4 decode units;
* buffer capacities of 144 KB, 144 KB and 36 KB.

Points where the published description is inconsistent, and the choice made:

* **Ranking.** The encoding algorithm ranks by absolute value, but the rank
  table ranks +v above -v. The table is used. This matters only when +v and
  -v tie for the maximum. Encoder and decoder share the unit, so the format
  stays self-consistent.
* **+1 or -1 in the encoder.** The encoder block drawing shows -1, while the
  algorithm and the worked examples add 1. +1 is used.
* **Worked example.** One worked example labels the E2M3 code 011101 as 5.5.
  That code is 6.5, and 5.5 is 011011. The E2M3 arithmetic is used.
* **dX.** dX is described as having a zero hidden bit, which cannot express
  the negative corrections that the -1 decoding produces. The exact signed
  difference is used.

This design's own choices, not given by the source:

* the dataflow: weight-stationary, activation broadcast, partial sums in the
  output buffer;
* the command format, the acc flag and all cycle timing;
* the loop order and address layout;
* rounding with ties toward zero in the quantizer, inferred from the
  "(3.5, 5]" interval;
* 6 fraction bits in FXP32;
* FP32 corner cases: flush-to-zero and infinity;
* the FP32-to-FP16 conversion before the quantizer;
* scale code 0 for an all-zero group;
* bit order inside a group;
* single-port-pair buffers with a registered read;
* synchronous active-low reset of the control state only.

Also:

* **Decoded value instead of metadata.** The decode unit forwards the decoded
  FP6 value of the top-1 with its index, rather than the raw metadata. The
  tile would otherwise repeat the decode.
* **Rank tree shared with the encoder.** The quantization engine reuses the
  same decode unit to find the top-1 during encoding.

Not built:

* The surrounding system: DRAM, network on chip, L1 cache, DMA engine, core
  controller and vector unit. They are only named in the source. Their
  places are the buffer write ports, the command ports and the output
  streams.
* The offline Sg-EM weight calibration (choice of sg_em and scale bias). It
  is a software search, so weights enter the engine already encoded.

## 8. Size and synthesis

At the default parameters the engine synthesises to about 41,000 generic
cells (Yosys, coarse) plus the memories:

* 2 x 8192 x 144 bits for the activation and weight buffers;
* 288 x 1024 bits for the output buffer.

Some functions are written so that each shifter and adder is used on every
path, with AND-OR result selection instead of long if/else chains:

* `fp32_add`
* `fx_to_fp32`
* `fp32_to_fp16`
* `round_e2m`
* the normalising shift of `scale_norm_unit`

This is plain combinational logic. It also keeps resource-sharing analysis
in synthesis fast once the 128 tiles are flattened.

**Workloads.** The model sizes below are public model configurations, not
numbers from the source:

| models | largest reduction K | commands per K |
|---|---|---|
| LLaMA2-7B, LLaMA3-8B, OPT-6.7B, Mistral-7B | 4096 hidden; FFN 11008 to 16384 | 2 |
| Falcon-7B | FFN 18176 | 3 |
| LLaMA3-70B | 8192 hidden; FFN 28672 | 4 |
| DeepSeek-R1-Distill-Qwen-1.5B | 1536 hidden; FFN 8960 | 2 |
| DeepSeek-R1-Distill-Qwen-7B | 3584 hidden; FFN 18944 | 3 |

Every linear layer of these models runs as a sequence of commands:

* 32 output columns per command;
* up to min(288, 8192/kg) rows per command;
* K up to 8192 per command, with longer K continued through `acc_i`.

The weights themselves are streamed from off-chip memory.

## 9. Verification

Every testbench is self-checking. Each one ends with a
`TB_RESULT checks=N failures=F` line and stops itself with a watchdog.
Reference models live in `tb/tb_ref_pkg.sv`. They are written with `real`
arithmetic and table searches, independently of the RTL.

| testbench | what it checks |
|---|---|
| `tb_top1_decode_unit` | all-equal subgroups (lowest index wins), +v/-v ties, the worked decode examples (`0011`+`00` gives 1.375, `0111`+`00` gives 5.5, `0110`+`00` gives 3.75), random subgroups with random metadata |
| `tb_pe_tile` | random tiles against an exact real-valued model of the tile; every sg_em code, corrections of both signs, cancellation against the incoming sum, zero sums |
| `tb_scale_norm_unit` | random FP16 groups, including normal, subnormal, zero and all-zero groups, against a table-search rounding model; a worked example group |
| `tb_encode_unit` | metadata must select the decodable value nearest the FP6 candidate (value-domain search, not +1/clamp); worked examples including a clamped case (3.578 becomes 3.75) |
| `tb_quant_engine` | full software Elem-EM quantizer on streamed groups with idle gaps; 2-cycle latency; one group per cycle |
| `tb_dpu_array` | random weights and activations in all 32 rows, FP32 results in tile order, 1-cycle latency, a reloaded row takes effect from the next group |
| `tb_mx_buffer`, `tb_output_buffer` | full-size buffers, random traffic against a model copy, read-during-write returns old data |
| `tb_dispatch_unit` | address sequences, strobes 1 and 2 cycles later, zero and continued starts, zero-length commands, exact command length |
| `tb_m2xfp_compute_engine` | the whole engine at default parameters (see below) |

`tb_m2xfp_compute_engine` runs three commands:

1. 3 rows x 2 K groups.
2. 288 rows x 28 K groups, which fills the output buffer.
3. A command with `acc_i = 1`, which continues ten of those rows.

It checks every FP32 output and every quantized group bit-exactly. It checks
the command lengths. It counts each mechanism and fails if any never
happened:

* weight loads;
* zero and continued starts;
* accumulation;
* drains and quantized outputs;
* positive and negative top-1 corrections;
* all four sg_em codes;
* top-1 ties;
* clamped metadata.

`tb_m2xfp_linear_layer` runs linear-layer tiles with real model reduction
lengths, again at default parameters:

* a K = 4096 projection: 64 rows x 32 columns, 128 K groups, filling the
  activation buffer;
* a K = 11008 FFN down-projection (LLaMA2-7B) as two commands, 256 + 88
  K groups, with the buffers reloaded in between and `acc_i` set on the
  second command.

Both are checked bit-exactly against the same reference. The second case
is the pattern every model listed in section 8 needs for its FFN layers.

**Running a test.** With Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl \
        rtl/m2xfp_pkg.sv tb/tb_ref_pkg.sv tb/tb_m2xfp_compute_engine.sv \
        --top-module tb_m2xfp_compute_engine -o sim
    ./obj_dir/sim

Compilation takes well under a minute. The full-size run takes a few
seconds.
