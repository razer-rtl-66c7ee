# RaZeR tensor core in SystemVerilog

NVFP4 stores a tensor as blocks of 16 four-bit FP4-E2M1 elements. Each block shares one FP8-E4M3
scale, and each tensor has one FP32 scale. Two parts of that encoding carry no information:

* FP4 has both a positive zero (code `0000`) and a negative zero (code `1000`), so one of its
  16 codes is wasted.
* The block scale is always positive, so its sign bit is always 0. Weights also lose nothing
  when the scale shrinks from E4M3 to E3M3, which frees a second bit.

RaZeR ("Redundant Zero Remapping", Chen, Dai, Hyun et al.) uses these free bits. Per block, the
code `0000` no longer means +0. It means a **special value** chosen for that block, and the freed
scale bits say which one. Weights choose from four special values and activations from two. A
block still costs 16 × 4 + 8 bits, as in NVFP4, but it now has a useful 16th quantization level.
Across the evaluated models, the best special values are ±5, which sits halfway between the
two largest FP4 magnitudes 4 and 6. The second weight pair is ±7, ±8 or ±9, depending on the model.

This repository holds RTL for the hardware side of that proposal: a 16 × 16 tensor core whose
decoders turn RaZeR-coded FP4 operands into their real values before a block-scaled
multiply-accumulate. The RTL follows the paper's description of the decoder and the array. The
SRAM organisation, the sequencing, the host interface and the accumulator arithmetic are not
described there; this implementation chooses them, and they are marked as its own below.

## 1. The number formats

### FP4-E2M1 elements

| code `S E E M` | value | code | value |
|---|---|---|---|
| `0000` | **special value** (RaZeR) | `1000` | −0 (stays zero) |
| `0001` | 0.5 | `1001` | −0.5 |
| `0010` | 1.0 | `1010` | −1.0 |
| `0011` | 1.5 | `1011` | −1.5 |
| `0100` | 2.0 | `1100` | −2.0 |
| `0101` | 3.0 | `1101` | −3.0 |
| `0110` | 4.0 | `1110` | −4.0 |
| `0111` | 6.0 | `1111` | −6.0 |

Only `0000` is remapped. The paper's decoder compares the code with binary zero.

### Special values and offset registers

A special value is always `±(6.0 + OF)`. OF is a 4-bit offset register in sign-magnitude form:
bit 3 is the sign, and bits 2:0 are the magnitude in steps of 0.5. So OF spans −3.5 … +3.5, and
special magnitudes span 2.5 … 9.5, all multiples of 0.5 like the FP4 grid. Storing offsets
instead of values keeps the decoder to one small adder.

| special value | OF code | used for |
|---|---|---|
| 5 | `1010` (−1.0) | weights and activations, all models |
| 7 | `0010` (+1.0) | second weight pair, Qwen3-8B |
| 8 | `0100` (+2.0) | second weight pair, most Llama/Qwen models |
| 9 | `0110` (+3.0) | second weight pair, Qwen3-32B |

The weight decoder has two registers, OF0 and OF1; the activation decoder has one, OF. All are
programmed once per model and shared by all lanes.

### Block scale bytes

Bit positions are this implementation's choice. The paper says only which bits are free, not
where they go.

```
weight block     7     6     5 .. 3     2 .. 0
                 sign  sel   E (E3M3)   M
activation block 7     6 .. 3     2 .. 0
                 sign  E (E4M3)   M
```

* `sign` is the sign of the block's special value, and `sel` picks OF0 or OF1.
* E4M3 uses bias 7, and E=0 is subnormal: 2^-6·M/8.
* The paper does not give a bias for E3M3. This implementation uses bias 3, with the same
  subnormal rule: 2^(E−3)·(1+M/8), and 2^-2·M/8 when E=0.
* The E4M3 code `1111 111` (NaN in the OCP definition) is read as the number 480. Block scales
  never hold NaN.

## 2. Architecture

```
 host write ──► SRAM (4096 × 128 b) ──read 1 word/cycle──┬──► weight decoder (16 lanes, OF0/OF1)
                    ▲                                    │         │ 16 weights + 16 scales
                    │ address                            └──► activation decoder (16 lanes, OF)
               controller ── strobes: scale load, valid,           │ 16 activations + 16 scales
                    first/last, clear                              ▼
                                                  16 × 16 MAC array, output stationary
                                                  MAC(i,j) owns C[i][j]  ──► result read port
```

| file | role |
|---|---|
| `rtl/razer_pkg.sv` | types (`rzr_t`, `wscale_t`, `ascale_t`), FP4 and scale decoding functions |
| `rtl/razer_fp4_decoder.sv` | one FP4-RaZeR element decoder (compare with zero, 6.0 + OF, sign, mux) |
| `rtl/razer_weight_decoder.sv` | OF0/OF1, 16 column scale bytes, 16 element decoders |
| `rtl/razer_act_decoder.sv` | OF, 16 row scale bytes, 16 element decoders without select |
| `rtl/razer_mac.sv` | block-scaled MAC with exact block sum and fixed-point accumulator |
| `rtl/razer_mac_array.sv` | 16 × 16 grid of MACs with shared (SIMD) control |
| `rtl/razer_sram.sv` | operand buffer, one write and one synchronous read port |
| `rtl/razer_ctrl.sv` | job sequencer |
| `rtl/razer_tensor_core.sv` | top level |

### The element decoder

`razer_fp4_decoder` is the core of the proposal:

1. The block's select bit chooses OF0 or OF1 through a 2:1 mux. The activation variant has
   only OF, so it has no mux.
2. An adder forms `6.0 ± |OF|` in half units. This is 12 ± `OF[2:0]`.
3. The block's sign bit is attached to form the special value.
4. The FP4 code is compared with `0000`. On a match the output is the special value;
   otherwise it is the ordinary FP4 value.

Both paths produce `rzr_t`: a sign bit and a 5-bit magnitude in units of 0.5. The FP4 values
map to 0…12 and the special values to 5…19.

The scale byte, and with it the sign and select bits, is latched once per block in each
decoder lane. The element path is combinational.

### The MAC and its arithmetic

The paper asks only for "low-precision MAC operations". This implementation keeps every step
exact, so a result can be checked bit for bit:

* **Element product:** `|a|·|w| ≤ 19·19 = 361` quarter units, and its sign is `sign(a) xor sign(w)`.
* **Block sum:** 16 products, `|Σ| ≤ 5776`, held in a 15-bit signed register. It is cleared
  by the block's first step.
* **Block scaling:** on the block's last step the MAC forms
  `Σ · sig_w · sig_a << (shexp_w + shexp_a)`, at most 2^41 in magnitude. Here
  `sig = 8+M` (or `M` when the scale is subnormal) and `shexp = E−1` (or 0). The MAC adds
  this to the accumulator.
* **Accumulator:** 56 bits signed (`ACC_W`), in units of 2^-16. The 2^-16 comes from 2^-2
  (elements) × 2^-5 (E3M3) × 2^-9 (E4M3). The accumulator holds at least 16384 worst-case
  blocks, so K can reach 262144.

**The real value of a result is `res_o · 2^-16`.** The tensor-wise FP32 scales of the two
operands are not applied in the core: the paper's tensor core shows no unit for them. Multiply
the result by their product downstream.

A floating-point accumulator, as in a GPU tensor core, would be smaller but inexact. Replacing
the accumulate line in `razer_mac.sv` is the only change that would need.

### Dataflow, SRAM layout and timing

The array is output stationary. In each K step the activation decoder sends one value per row,
broadcast along the row, and the weight decoder sends one value per column, broadcast along the
column. All 256 MACs act on the same strobes.

The paper's drawing shows arrows between neighbouring MACs, but its text says the array is
SIMD. This implementation follows the text and has no systolic skew.

Each K block (16 values of K) occupies 18 consecutive SRAM words:

| word | contents |
|---|---|
| 0 | weight scale bytes: bits 8j+7:8j = column *j* (all 128 bits) |
| 1 | activation scale bytes: bits 8i+7:8i = row *i* (all 128 bits) |
| 2 + k | bits 64+4i+3:64+4i = activation code of row *i*; bits 4j+3:4j = weight code of column *j*; both at K step k |

A job `(base_i, nblk_i, clear_i)` computes `C += A·W` over `nblk_i` blocks starting at
`base_i`:

* With `clear_i` set, the job first zeroes C.
* Without it, the job adds to the previous result, which is how a K longer than the SRAM
  holds (227 blocks = 3632) is split across loads.
* The controller reads one word per cycle. It latches the two scale words into the decoders,
  then streams 16 element words with first/last strobes delayed one cycle to meet the SRAM data.

**Latency:** `done_o` pulses `18·nblk + 2` cycles after the `start_i` cycle. Throughput is 16
MAC cycles in every 18. Overlapping the scale reads with the previous block's elements would
reach 16/16, but the paper gives no timing, so it is not done here.

### Using the core

1. Write the operand words through `mem_we_i / mem_waddr_i / mem_wdata_i`.
2. Write the offsets with `of_wdata_i` and one-hot `of_we_i`: bit 0 is weight OF0, bit 1 is
   weight OF1, bit 2 is activation OF. For example, `1010` and `0100` give weights {±5, ±8}.
3. Pulse `start_i` with `base_i`, `nblk_i` and `clear_i`.
4. Wait for `done_o`. Starting a job while `busy_o` is high is ignored, and an assertion flags it.
5. Read C[i][j] with `res_row_i / res_col_i → res_o` (combinational).

## 3. Verification

Every block has a self-checking testbench in `tb/`. All of them compare against
`tb/razer_ref_pkg.sv`, a real-number model written directly from the format definitions; it
does not reuse the RTL's integer encodings.

| testbench | what it checks |
|---|---|
| `tb_razer_fp4_decoder` | every code × every OF0 × a sweep of OF1 × select × sign, for both variants; the −5.0 example; −0 |
| `tb_razer_weight_decoder`, `tb_razer_act_decoder` | random offsets, scale bytes and codes; decoded values and scales; scale hold between loads |
| `tb_razer_mac` | 200 random blocks with idle gaps, clear, clear in the same cycle as a block result, worst-case block term |
| `tb_razer_mac_array` | 12 random blocks on all 256 MACs with per-row/per-column scales |
| `tb_razer_sram` | write/read-back, one-cycle read latency, output hold, read-during-write returns old data |
| `tb_razer_ctrl` | cycle-exact address and strobe sequence, `done` at 18N+2, `busy`, clear, zero-block job, start ignored while busy |
| `tb_razer_tensor_core` | end to end at default size (see below) |

`tb_razer_tensor_core` runs the top module with all parameters at their defaults:

* It writes random RaZeR tiles into the SRAM, runs jobs and compares all 256 results exactly.
* It checks the job latency.
* It uses the evaluated special-value sets ({±5, ±8}, {±5, ±7} and {±5, ±9} for weights; ±5
  for activations) and random offsets.
* It runs a K = 4096 reduction, the hidden size of Llama-3.1-8B, as two accumulated jobs of
  128 blocks.
* It counts the mechanisms it exercised: the four weight special values, both activation
  special values, negative zero, subnormal scales, multi-block jobs, accumulation without
  clear, and clear. A mechanism that never occurred is a failure.

`tb_razer_workload_gemm` runs the deepest reductions of three evaluated models on one
16 × 16 output tile, each as jobs of 200 blocks accumulated without clear:

| reduction | K | weight special values | cycles |
|---|---|---|---|
| Llama-3.1-8B down projection | 14336 | {±5, ±8} | 16138 |
| Qwen3-8B down projection | 12288 | {±5, ±7} | 13832 |
| Qwen3-32B down projection | 25600 | {±5, ±9} | 28816 |

A fourth run repeats K = 25600 with every operand at 9.5 and near-maximal scales. Its result
is about 2^51 units, which checks that the accumulator width is enough. All 256 outputs of
every run match the reference exactly.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To run one with
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/razer_pkg.sv tb/razer_ref_pkg.sv tb/tb_razer_tensor_core.sv \
    --top-module tb_razer_tensor_core -o sim
./obj_dir/sim
```

Replace the testbench name to run another. The end-to-end run takes a few seconds. Every file
in `rtl/` passes `verilator --lint-only -Wall` with warnings only and elaborates with the slang
front end of yosys. The warnings are for unused package constants, the select input that the
one-offset decoder ignores, and the reset that the assertions sample synchronously.

## 4. Where this departs from the paper, and what is missing

Taken from the paper:

* the 16 × 16 SIMD MAC array and its weight and activation decoders
* the offset encoding and the special value `6.0 + OF`
* the remapping of `0000` only
* two offsets plus a select bit for weights, one offset and no select for activations
* E3M3 weight scales and E4M3 activation scales, each with the freed bits as metadata
* the block size of 16

This implementation's own choices:

* the decoded number format `rzr_t`
* the bit positions of the metadata in the scale byte
* the E3M3 bias
* broadcast (not systolic) operand wiring
* output-stationary dataflow
* exact integer arithmetic with a 56-bit fixed-point accumulator
* the SRAM size (4096 × 128 bits) and word layout
* the controller and its 18-cycle block schedule
* the host ports

Not built:

* **The per-tensor FP32 scale.** Apply it to `res_o` outside the core.
* **An activation quantizer.** The paper picks each activation block's special-value sign by
  quantizing it twice and keeping the lower error, but proposes no hardware for this. The core
  expects already-quantized operands.
* **A plain-NVFP4 mode.** None is described: with RaZeR data, `0000` is always remapped.
* **Block sizes other than 16.** The paper's block-size ablation uses 32 to 128 elements. That
  would need a wider block sum and another SRAM layout.
* **The GPU kernels.** They are software and are not part of this RTL.

The SRAM is a behavioural array. A real chip would use a compiled SRAM macro with the same
ports. The paper reports area and power after synthesis in a 28 nm process. This RTL has not
been through timing-driven synthesis, and no area or power figures are claimed for it.
