# Shift-based accelerator for power-of-two quantized DNNs

When every weight of a layer is a signed power of two, `w = ±2^e`, each
multiplication `act * w` becomes a left shift of the activation by `e`, plus a
sign. This RTL is an accelerator for the convolution layers of such networks.
The weights are 4-bit power-of-two (PoT) codes and the activations are 8-bit
integers. Multipliers are replaced by *shift-PEs*. Each shift-PE is a 3-bit
barrel shifter, and the add that follows it can also subtract.

The accelerator has four GEMM units. Each unit has 64 shift-MAC units, so 256
shift-MACs run every cycle. There are on-chip buffers for packed 4-bit weights
and for 8-bit activations. A small scheduler takes commands and data from a
host over a 32-bit stream and sends 32-bit sums back over a second stream.

The design comes from a published study of PoT quantization on edge FPGAs.
That study defined three shift-PE variants, one per 4-bit PoT format. It then
built its accelerator from the cheapest one, the single-term format that the
QKeras training library generates. All three PEs are included here. A
parameter selects which one the GEMM units use. The QKeras PE is the default,
which is the accelerator configuration of the study.

## 1. Weight codes

A weight code has 4 bits. Bit 3 is the sign and the weight is sign-magnitude.
Bits 2:0 hold *shift amounts*, not PoT values. The three formats differ in how
they split those three bits:

| format | code | value | levels |
|---|---|---|---|
| QKeras (default) | `{s, e[2:0]}` | `(-1)^s · 2^e` | ±1, ±2, … ±128; no zero |
| MSQ | `{s, a[1:0], b}` | `(-1)^s · (T1 + T2)` | T1 ∈ {0, 1/2, 1/4, 1/8} for a = 0..3; T2 ∈ {0, 1/2} for b = 0..1 |
| APoT | `{s, a[1:0], b}` | `(-1)^s · (T1 + T2)` | T1 ∈ {0, 1/2, 1/4, 1/16} for a = 0..3; T2 ∈ {0, 1/8} for b = 0..1 |

The two-term formats need two details:

* **Zero.** Zero is not a power of two, so it cannot be written as a shift. A
  field value of 0 means "this term is zero", and a multiplexer forces the
  shifter's output to 0.
* **APoT's 1/16.** This level needs a shift of 4, which does not fit a 2-bit
  field. An extra multiplexer maps field value 3 to shift 4.

The QKeras format has no zero level, so its PE needs neither multiplexer.

**From trained weights to codes.** After conversion, a QKeras PoT layer holds
integer weights ±2^0 … ±2^7 times a per-layer scale. The host converts each
weight once, before inference:
`code = {w < 0, log2|w|}`. An example is in `to_code()` of
`tb/tb_shift_acc.sv`. Note that +128 does not fit an int8, but its code
`4'b0111` does.

**Fractions in MSQ and APoT.** These levels are fractions, and a plain right
shift would drop activation bits. So these PEs first scale the activation by
`2^FRAC`: FRAC is 3 for MSQ and 4 for APoT. The PE then shifts right. The
result is exact: `term = act · |level| · 2^FRAC`. The host divides the scale
out, together with the layer scale.

## 2. Shift-PEs (`shift_pe_qkeras`, `shift_pe_msq`, `shift_pe_apot`)

The three PEs have the same ports:

| port | meaning |
|---|---|
| `act` | int8 activation |
| `wcode` | 4-bit weight code |
| `in_valid`, `in_first` | operand valid, and a tag |
| `out_term` | 16-bit shifted activation |
| `out_neg` | weight sign |
| `out_valid`, `out_first` | the input flags, delayed |

The PE does **not** negate the term. The sign goes on to the accumulator, which
picks add or subtract. This keeps the negation out of the shifter and puts it
on the adder that is needed anyway.

Latencies are 1, 2 and 3 cycles. They follow the per-format cycle counts that
the original study measured:

* **QKeras**: the shifter, then one output register.
* **MSQ**: stage 1 runs both shifters and zero multiplexers. Stage 2 adds the
  two terms.
* **APoT**: stage 1 maps the shift amount (3 → 4). Stage 2 runs the shifters
  and zero multiplexers. Stage 3 adds the two terms.

The pipelines accept one operand pair every cycle. Reset clears only the valid
flags.

## 3. GEMM unit (`gemm_unit`)

A GEMM unit is a grid of `ROWS × COLS = 8 × 8` MAC units, and each MAC has its
own 32-bit accumulator. The unit computes an outer product at each step, and
the accumulators stay in place (output-stationary):

* Each cycle, one reduction step `k` arrives. It carries 8 weight codes, one
  per output row, and 8 activations, one per output column.
* MAC `(r, c)` computes `acc[r][c] ± shift(act[c], w[r])`.
* After K steps: `acc[r][c] = Σ_k act[k][c] · w[k][r]`.

**Restarting a sum.** The first step of a sum carries `in_first`. That tag
travels through the PE pipeline with the data. When it reaches the accumulator,
the accumulator loads the term instead of adding it. So a new sum can start on
the cycle after the last step of the previous one, with no clear cycle.

**Timing.** `busy` stays high while any step is in flight. Results are final
LAT cycles after the last step, LAT being the PE latency. `PE_KIND` selects the
shift-PE.

## 4. The accelerator (`shift_acc`)

```
 host stream in ──► scheduler ──► weight buffer ×4 ──► GEMM unit ×4 (8×8 shift-MACs)
   (32 bit)          │       └──► input buffer ──────► (same 8 activations to all)
                     │                                      │
 host stream out ◄───┴──────────── result select ◄──────────┘
   (32 bit)
```

One **tile** covers 32 output channels and 8 output pixels. The 32 channels
are filters; GEMM unit `u` holds filters `8u … 8u+7`. The 8 pixels are
im2col columns.

* All four units read the same reduction step each cycle.
* They share the 8 activations, and each reads its own 8 weights.
* The whole array therefore does 256 shift-MACs per cycle.

**Buffers.** There are four `weight_buffer`s, one per GEMM unit. Each holds
8192 steps of one 32-bit word: eight 4-bit codes, code `r` in bits
`4r+3:4r`. At 4 bits a word holds twice as many weights as at 8 bits. That
halves both the buffer space and the stream words that weights need. The one
`input_buffer` holds 8192 steps of 8 activations. Each step is two stream words
of four bytes, and byte `j` of word `s` is pixel `4s+j`. All buffers read
synchronously.

### Command protocol (`scheduler`)

Every command begins with a header word:

| bits | field |
|---|---|
| [31:28] | opcode |
| [27] | accumulate flag (COMPUTE only) |
| [26:16] | reserved |
| [15:0] | number of steps K |

| opcode | payload | action |
|---|---|---|
| `1` LOAD_WGT | `4·K` words | Steps 0..K-1 of the weight buffers. The words are step-major: word `i` goes to unit `i mod 4`, step `i div 4`. |
| `2` LOAD_INP | `2·K` words | Steps 0..K-1 of the input buffer. |
| `3` COMPUTE | none | Runs steps 0..K-1 through all units. Accumulate = 0 starts new sums; accumulate = 1 adds to the sums the units already hold. Then sends 256 result words. |
| `0` | none | Ignored. |

The order of the 256 result words is unit, then row, then column:
`result[64u + 8r + c]` is filter `8u+r`, pixel `c`. `m_tlast` marks the last
word.

The accumulate flag is how a layer whose K is larger than the buffers gets
done. The host loads a chunk and computes; then it loads the next chunk and
computes with accumulate = 1. Only the final COMPUTE's output is of use.

**Weight reuse.** Weights and activations are loaded separately. So the host
can keep one block of 32 filters in the weight buffers and stream many pixel
blocks through it. Weights then cross the bus once per layer and filter block.

**Stream behaviour.**

* `s_tready` is high in the idle and load states, so load words go in at one
  per cycle.
* `s_tready` is low from the COMPUTE header until the last result has been
  taken. During that time the host stream stalls.
* Results obey a valid/ready rule: a word on offer stays unchanged until it is
  taken. An assertion checks this.
* Back-pressure on `m_tready` pauses the result drain.

**Timing of COMPUTE K.**

* Reads issue on K consecutive cycles.
* `g_valid`/`g_first` follow one cycle later, aligned with the buffer data.
* The scheduler then waits until the GEMM units are idle.
* The first result is on offer `K + LAT + 2` cycles after the header was
  accepted, and results follow one per cycle.

With the default QKeras PE that is K + 3 cycles.

### Host side, end to end

To run a convolution layer, the host does the following:

1. Converts the weights to codes (section 1).
2. Forms the im2col matrix. Each output pixel is a column of K = kh·kw·cin
   activations.
3. For each block of 32 filters, issues LOAD_WGT K.
4. For each block of 8 pixels, issues LOAD_INP K and then COMPUTE K.
5. Applies bias, zero points, scales and requantization to the int32 results.

The accelerator does not implement step 5.

## 5. What comes from the study and what is this design's own

**From the study:**

* The 4-bit sign + shift-term codes of the three formats.
* The structure of the three shift-PEs: shifters, zero-skip multiplexers, the
  APoT remap multiplexer, the one adder, and a sign-correcting multiplexer at
  the accumulation.
* The PE latencies: 1, 2 and 3 cycles.
* Four GEMM units of 64 MACs.
* A weight buffer that holds twice the weights because codes are 4 bits.
* The QKeras PE as the accelerator's PE.

**This design's own choices**, where the study gives no detail:

* The 8 × 8 output-stationary arrangement of the 64 MACs.
* The tile shape, and the activations shared by all units.
* The 32-bit accumulators.
* The fixed-point scaling in the MSQ/APoT PEs.
* The buffer sizes: 8192 steps, i.e. 32 KiB of weights per unit, 128 KiB in
  all, plus 64 KiB of activations.
* The command set, header layout and data orders.
* The 32-bit valid/ready streams.
* The `in_first` restart.
* Synchronous active-low reset.

**Not built:**

* The study's accelerator came from an earlier 8-bit "vector MAC" design. Its
  other parts (its exact datapath organisation and its post-processing of
  outputs) are not described, so they are absent here. Outputs are raw int32
  sums.
* The 8-bit multiplier PE used as a baseline is not included.
* The host CPU, the DMA engine and the driver software are outside the RTL.
  The testbenches stand in for them.
* The study closed timing at 250 MHz on an edge FPGA. This RTL has no
  frequency-specific structure, and no timing has been measured for it.

## 6. Sizes against the evaluated workloads

At the default parameters, a single COMPUTE covers a reduction of up to 8192
steps.

| workload | largest reduction K | fits in one COMPUTE? |
|---|---|---|
| Synthetic matrix products: m ∈ {128, 256, 512}, n ∈ {64, 256, 1024}, k ∈ {256, 512, 1024} | 1024 | yes |
| ResNet18, 3×3×512 | 4608 | yes |
| InceptionV1, 3×3×192 | 1728 | yes |
| MobileNetV2, 1×1×960 | 960 | yes |

The layer sizes of the three networks come from their standard definitions.
Whole layers do not fit on chip. For example, ResNet18's last layers have
2.36 M weights, and the host streams them 32 filters at a time. Depthwise
layers (K = 9 per channel) fit the tiling poorly.

**Where the cycles go.** `tb_dnn_conv` reports cycles per layer. Compute
takes one cycle per reduction step. Activations take two stream words per step
and go through the same 32-bit port. So, with weights kept for a whole filter
block, a tile spends about K cycles loading activations and K cycles computing.
256 more cycles go to draining results. Loading and computing do not overlap,
because the design has one input buffer and no double buffering.

Measured cycles against the compute-only ideal of K per tile:

| layer | measured | ideal |
|---|---|---|
| ResNet18 conv5_x | 1.87 M | 0.52 M |
| InceptionV1 3a | 1.13 M | 0.34 M |
| MobileNetV2 expansion | 0.25 M | 0.04 M |

A wider host port, or double buffering, would narrow the gap. The study's
accelerator also spends part of its time moving data; it credits the halved
weight traffic with a large part of its gain on ResNet18.

## 7. Files and simulation

`rtl/`:

| file | contents |
|---|---|
| `pot_pkg.sv` | shared types, PE kinds, command header |
| `shift_pe_qkeras.sv`, `shift_pe_msq.sv`, `shift_pe_apot.sv` | the three shift-PEs |
| `gemm_unit.sv` | 64-MAC GEMM unit |
| `weight_buffer.sv`, `input_buffer.sv` | on-chip buffers |
| `scheduler.sv` | command decoder and sequencer |
| `shift_acc.sv` | top level |

`tb/` holds one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M`. Expected values always come from integer
arithmetic on the weight *levels*, never from shifting.

| testbench | what it covers |
|---|---|
| `tb_shift_pe_*` | Every code, corner activations −128/127, exact latency. |
| `tb_gemm_unit` | All three PE kinds side by side. Random sums, back-to-back restarts, `busy` timing. |
| `tb_weight_buffer`, `tb_input_buffer` | Packing, lane order, partial-entry writes. |
| `tb_scheduler` | Write steering, read sequence, `g_first` with and without accumulate, result order, `m_tlast`, back-pressure. |
| `tb_shift_acc` | The full-size accelerator at its defaults: a short tile, a 300-step reduction split 180 + 120 with accumulate, and a tile using all 8192 buffer steps. Random stalls on both streams. Checks every result, the K + 3 latency, and that each mechanism occurred. |
| `tb_synthetic_mm` | The smallest synthetic benchmark (128 × 64 × 256) on three accelerators, one per PE kind, all 8192 results each. |
| `tb_dnn_conv` | Whole convolution layers: ResNet18 conv5_x (3×3, 512→512, 7×7, K = 4608), InceptionV1 3a 3×3 (96→128, 28×28) and MobileNetV2 1×1 expansion (96→576, 14×14). im2col with zero padding; every output is checked against a direct convolution. About 15 s. |

Example run with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
    rtl/pot_pkg.sv tb/tb_shift_acc.sv --top-module tb_shift_acc -o sim
./obj_dir/sim
```

Replace `tb_shift_acc` with any other testbench name. Every testbench except
`tb_dnn_conv` finishes in well under a second.

**Lint notes.** `-Wall` reports parameters of `pot_pkg` that a given module
does not use, and the reserved header bits that the scheduler ignores. In the
scheduler, the buffer write-data outputs are wired straight from `s_tdata` on
purpose.
