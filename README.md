# Stella Nera: a multiplier-free approximate matrix-multiply accelerator in SystemVerilog

Stella Nera computes `A·B` for a weight matrix `B` that is known in advance (a DNN layer at
inference time) without a single multiplier. It uses the Maddness form of product
quantization:

* Every input row `a` (length D) is cut into **C codebooks** of **CW** consecutive elements
  (CW = 9: one unrolled 3×3 kernel of one input channel).
* Each codebook is **hashed** to one of **K = 16 prototypes** by a balanced binary decision
  tree of depth log2(K) = 4. A tree node looks at one element of the sub-vector and goes
  left if it is below the node's threshold, right otherwise. Only four of the nine elements
  are ever looked at (one per level), chosen offline.
* For every output column `m` a **lookup table** holds, for each codebook `c` and prototype
  `k`, the precomputed dot product of prototype `k` with the matching slice of column `m` of
  `B`, quantised to INT8.
* The approximate result is the sum of the C table entries picked by the C hashes:
  `(A·B)[n][m] ≈ Σ_c LUT_m[c][enc_c(a_n)]`, accumulated in INT24.

The hardware therefore needs only comparators (encoding), small memories and adders
(decoding). The tables, thresholds and input-element selections come from offline training
and are loaded through a configuration bus. This repository gives synthesizable RTL for the
accelerator unit and for a four-unit system built from it. Each unit has 4 encoders and 64
decoders with 16 codebooks per output, and returns 8 results per cycle. In total the system
has 256 output columns and returns 32 results per cycle.

## Block structure

```
                      sn_system  (N_UNITS = 4, same input to all units)
 in_data  ──┬──────────────┬──────────────┬──────────────┐
 4 × 9 × W  │              │              │              │
        ┌───▼────┐     ┌───▼────┐     ┌───▼────┐     ┌───▼────┐
        │sn_unit │     │sn_unit │     │sn_unit │     │sn_unit │ ─► out_data[u][0..7]
        └────────┘     └────────┘     └────────┘     └────────┘

 sn_unit
  ┌──────────────── sn_encoder_unit ─────────────────┐   ┌──────── sn_decoder_array ────────┐
  │ slice 0 ─► sn_encoder 0 ─┐                        │   │  ┌► sn_decoder 0  ─┐              │
  │ slice 1 ─► sn_encoder 1 ─┤ Enc Sel  enc (4 b)     │   │  ├► sn_decoder 1  ─┤  Out Sel     │
  │ slice 2 ─► sn_encoder 2 ─┼────────► Current C ────┼──►│  ├►   ...          ├──► 8 × INT24 │
  │ slice 3 ─► sn_encoder 3 ─┘          (4 b)         │   │  └► sn_decoder 63 ─┘              │
  └───────────────────────────────────────────────────┘   └──────────────────────────────────┘
```

| file | role |
|---|---|
| `rtl/sn_pkg.sv` | default sizes, configuration-bus struct and target enum |
| `rtl/sn_scm.sv` | standard-cell memory (flip-flop register file): thresholds, dimension selections, LUTs |
| `rtl/sn_encoder.sv` | one decision-tree encoder holding C/4 trees |
| `rtl/sn_encoder_unit.sv` | four interleaved encoders, input handshake, Enc Sel multiplexer |
| `rtl/sn_decoder.sv` | one LUT + INT24 accumulator + result register (one output column) |
| `rtl/sn_decoder_array.sv` | 64 decoders + Out Sel multiplexer |
| `rtl/sn_unit.sv` | one accelerator unit |
| `rtl/sn_system.sv` | top: four units tiled along the output columns |

## The encoder: one tree level per cycle

An encoder does not evaluate a tree in one cycle. It walks the tree level by level, reusing
one comparator:

1. **Load** (`start_i`): the *dimension memory* entry of the selected tree gives four 4-bit
   element indices. The four selected elements of the 9-element input are copied into a 4×W
   register.
2. **Levels 0–3**, one per cycle. A 2-bit level counter selects one of the four stored
   elements. The threshold memory is read at `{tree, node}` with `node = 2^level − 1 + path`
   (heap order: root 0, level 1 nodes 1–2, level 2 nodes 3–6, level 3 nodes 7–14). Then
   `bit = !(element < threshold)` is shifted into the path register. An element *equal* to
   its threshold goes right.
3. After level 3 the four path bits (level 0 in the MSB) are registered as the **encoding**,
   a prototype index 0–15, and `enc_valid_o` pulses.

The walk takes 4 cycles. The element register reloads in the cycle of the last compare, so
one encoder produces one encoding every 4 cycles. The latency from the load cycle to
`enc_valid_o` is 5 cycles.

Each encoder holds `C/4` trees (4 at the default C = 16), selected by the *C offset*.
Encoder `e` always serves the codebooks `c` with `c mod 4 = e`, using tree `q = c div 4`.

### Interleaving four encoders

One encoder is four times too slow for the decoders, which take one encoding per cycle. The
encoding unit therefore starts the four encoders one cycle apart from the same input beat:

```
cycle            t    t+1  t+2  t+3  t+4  t+5  t+6  t+7  t+8  t+9 ...
in_data          ── beat q (codebooks 4q..4q+3) ──  ── beat q+1 ────────
in_ready                             1                   1
encoder 0       load  L0   L1   L2   L3/load L0 ...
encoder 1             load L0   L1   L2   L3/load ...
encoder 2                  load L0   L1   L2   L3/load
encoder 3                       load L0   L1   L2   L3/load
enc_o / c_o                                    4q   4q+1 4q+2 4q+3 4q+4 ...
```

* An **input beat** carries four 9-element sub-vectors: codebooks `4q … 4q+3` of one row.
  A row of C = 16 codebooks takes four beats.
* Encoder `e` latches its slice `e` cycles after encoder 0. The beat therefore **has to stay
  on `in_data_i` for four cycles**. `in_ready_o` is high in the fourth cycle. Once
  `in_valid_i` is raised it must stay high with stable data until `in_ready_o`; an assertion
  checks this. Gaps between beats are allowed and simply delay the stream.
* With gap-free input, the four encoders finish on consecutive cycles. **Enc Sel** forwards
  the one valid encoding with its codebook number `Current C = 4q + e`. The decoders thus
  see codebooks 0, 1, …, 15 of a row on consecutive cycles, then codebook 0 of the next row.
* The sustained rate is one beat every 4 cycles and one row every C = 16 cycles.

The interleave needs at least as many encoders as tree levels (`N_ENC ≥ log2(K)`). This is
checked at elaboration.

## The decoders and the result readout

Every decoder sees the same `(encoding, Current C)` stream. It reads
`LUT[Current C][encoding]` (C×K = 256 INT8 entries), sign-extends it and adds it to its
INT24 accumulator. The accumulator restarts whenever `Current C = 0`. The cycle after the
accumulation of codebook C−1, the sum moves into a result register and `res_valid` pulses.
The accumulator is then free for the next row. Sixteen INT8 terms cannot overflow 24 bits.

All 64 decoders finish together. **Out Sel** then sends their results out in 8 groups of 8
(`out_group_o` = 0…7, group `g` = decoders `8g … 8g+7`) on 8 consecutive cycles with
`out_valid_o` high. The next set of results can come at the earliest 16 cycles later, so the
8-cycle readout always finishes first. In general `N_DEC / W_DEC ≤ C` must hold; it is
checked at elaboration. The output has no back-pressure: a consumer must take every group
in the cycle it appears.

### Latency and throughput

Count from the first cycle of a row's last beat. The encoding of codebook C−1 leaves
3 + 5 = 8 cycles later. The decoders' result registers load 2 cycles after that, and group 0
appears one cycle later. That is **11 cycles** in all, and groups 1–7 follow on the next
cycles. With gap-free input a new burst starts every C = 16 cycles. Each decoder does one
lookup per cycle, and a lookup stands for CW = 9 multiply-accumulates. The four-unit system
thus performs 256 × 9 MAC-equivalents per cycle, which is 2.9 TOp/s at the 624 MHz reported
for the 14 nm implementation. The testbenches check all these cycle numbers.

## System of four units

`sn_system` instantiates four `sn_unit`s and feeds all of them the same input beats. Each
unit holds the tables of a different set of 64 output columns. Output lane `i` of unit `u`
in group `g` is column `m = 64u + 8g + i`. The units run in lockstep (asserted), so handshake
and `out_valid_o` / `out_group_o` come from unit 0. The INT24 results leave on `out_data_o`.
In the published system, FP16 FMA units next to the accelerator convert them to FP16 and run
the final fully connected layer. Those units are not part of this RTL.

## Loading a layer: the configuration bus

`cfg_i` (`sn_pkg::cfg_t`) writes one table entry per cycle when `we` is set:

| `target` | `unit` | `idx` | `addr` | `data` |
|---|---|---|---|---|
| `CFG_THRESH` | unit | encoder `c mod 4` | `(c div 4)·16 + node` | threshold, W-bit signed, in `data[W-1:0]` |
| `CFG_DIM` | unit | encoder `c mod 4` | `c div 4` | four 4-bit element indices (0–8), level 0 in `[3:0]` … level 3 in `[15:12]` |
| `CFG_LUT` | unit | decoder `d` (column `64u + d`) | `c·16 + k` | INT8 entry in `data[7:0]` |

Every unit needs the same trees, because each unit hashes the input itself. The thresholds
and dimension selections are therefore written once per unit. Tables are not reset and must
be loaded before rows are streamed. A table write takes effect in the next cycle.

Loading a whole layer at the defaults takes
4 × (16 × 16 + 16) + 256 × 256 = 66,624 writes.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `W` | 8 | input element and threshold width, signed |
| `CW` | 9 | elements per codebook |
| `K` | 16 | prototypes per codebook (tree depth log2 K) |
| `C` | 16 | codebooks per output (C_dec) |
| `N_ENC` | 4 | encoders per unit |
| `N_DEC` | 64 | decoders (output columns) per unit |
| `W_DEC` | 8 | results per cycle per unit |
| `LUT_W` / `ACC_W` | 8 / 24 | LUT entry and accumulator width |
| `N_UNITS` | 4 | units in the system |

The defaults are the published configuration: CW, K, C, the 4 encoders, N_dec = 64 and
W_dec = 8 per unit, INT8/INT24, and 4 units. The one exception is `W`; see below.

## What follows the published design and what is this design's own

Taken from the published description:

* the Maddness algorithm;
* four interleaved encoders that walk one tree level per cycle and together deliver one
  encoding per cycle;
* the encoder datapath: dimension selection, element register, level multiplexer,
  comparator, path register, threshold memory addressed with a C offset, and encoding
  register;
* the decoder: a LUT addressed by `{Current C, encoding}`, an adder, an accumulator and a
  result register;
* INT8 tables with INT24 sums;
* the Out Sel multiplexer with W_dec results per cycle, and the rule `N_dec/W_dec ≤ C_dec`;
* standard-cell memories;
* all sizes listed above.

Choices made here because the description leaves them open:

* **Input element width.** The data width is only given as "W". 8-bit signed two's
  complement is used because the network's activations are quantised to 8 bits. The
  published system speaks of running an FP16 network, so its encoders may compare FP16
  values. That would need a different comparator.
* **Threshold layout** inside a tree (heap order, 16 words per tree with one unused),
  **dimension-memory format**, and the **configuration bus** as a whole.
* **Input handshake** (valid/ready, a beat held for four cycles) and **codebook order**
  (encoder `e` serves `c mod 4 = e`).
* **Decoder control.** The accumulator restarts on `Current C = 0`, and the result register
  loads after codebook C−1. The readout starts the cycle after, and there is no output
  back-pressure.
* **System tiling along the output columns.** With C kept at 16 and four times the
  decoders, this is the reading that matches the published totals.
* **Memory cells.** The memories are written as flip-flop arrays with a combinational read.
  The physical implementation may use latches.
* **Reset.** An active-low asynchronous reset clears control state only.

Not built:

* the FP16-LUT / FP32-accumulation variant, which is mentioned but not evaluated;
* the extra adder needed when several units split one dot product along D (not used in the
  four-unit configuration);
* the FP16 FMA units.

The 624 MHz timing and the area and power figures belong to the 14 nm implementation and are
not reproduced here.

## What fits

One pass holds 16 codebooks (D = 144 input elements) for 256 output columns. Rows stream
without limit. A ResNet-9 3×3 convolution uses one codebook per input channel, so its layers
from 64→128 channels up to 256→256 channels need 4 to 16 passes along D.
Each pass needs its own table load, and the partial sums must be added outside this RTL. The
layer tables (128 KiB to 1 MiB of INT8) exceed the 64 KiB of LUT in the system.
`tb_sn_resnet_layer` shows this procedure for the 64→128 layer.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares against an independent
software model: tree walks, table sums and expected cycle numbers. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | covers |
|---|---|
| `tb_sn_scm` | random writes and reads against a model; write visible the next cycle |
| `tb_sn_encoder` | random trees, back-to-back and gapped walks, ties, 5-cycle latency |
| `tb_sn_encoder_unit` | codebook order 0…15, one encoding per cycle, 4-cycle beats, stalls |
| `tb_sn_decoder` | sums with extreme table values, result timing and hold |
| `tb_sn_decoder_array` | 64 columns, group order, readout timing, full-rate rows |
| `tb_sn_unit` | end to end at reduced sizes (C = 8, 16 decoders, 4 results per cycle) |
| `tb_sn_system` | end to end with every parameter at its default: full-rate rows, stalls, threshold ties, all 16 leaves, all groups |
| `tb_sn_resnet_layer` | the ResNet-9 64→128-channel 3×3 layer on an 8×8 map: im2col rows, four passes along D with table reloads, partial sums added in the testbench |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl \
          rtl/sn_pkg.sv tb/tb_sn_system.sv --top-module tb_sn_system -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The full-size system test loads about 66,600 table entries and streams 24 rows. It finishes
in about a second.
