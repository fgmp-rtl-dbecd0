# FGMP accelerator RTL: a mixed NVFP4/FP8 datapath with on-the-fly activation precision selection

Four-bit floating point halves the cost of LLM inference against FP8, but a
whole model quantized to 4 bits loses too much accuracy. Fine-grained mixed
precision (FGMP) keeps most of the gain. It splits every weight and activation
tensor into blocks of 16 consecutive values along the dot-product dimension.
Each block is stored in one of two formats:

- **NVFP4**: sixteen 4-bit E2M1 codes plus one E4M3 scale shared by the block (a "microscale").
- **FP8**: sixteen E4M3 codes with no scale.

A single metadata bit per block says which. Only the few blocks whose rounding
would hurt the model stay in FP8. For weights this choice is made offline. For
activations it must be made in hardware, as each output block is produced.

This RTL implements the hardware side:

1. A vector multiply-accumulate (VMAC) datapath that takes any mix of NVFP4 and FP8 blocks at full rate.
2. A post-processing unit (PPU) that decides each output block's precision as it is written.
3. A small accelerator top level that connects several processing elements (PEs) to one shared PPU.

Built-in sizes: 16 lanes per PE and a block size of 16. These are the
prototype numbers the method was evaluated with. Everything else (buffer
depths, number of PEs, handshakes, command format) is this design's own choice
and is listed below.

## Number formats and the block word

| Format | Bits | Values |
|---|---|---|
| E2M1 | sign, 2 exponent bits, 1 mantissa bit | ±{0, 0.5, 1, 1.5, 2, 3, 4, 6} |
| E4M3 | sign, 4 exponent bits (bias 7), 3 mantissa bits, subnormals | up to ±448; code 0x7F (NaN) is never produced or expected |
| FP32 | partial sums, sensitivities, threshold, decision metric | |

Every block moves through the design as one 137-bit `fgmp_block_t`
(`rtl/fgmp_pkg.sv`):

| field | bits | meaning |
|---|---|---|
| `fp8` | 1 | 1 = FP8 block, 0 = NVFP4 block (the metadata bit) |
| `scale` | 8 | E4M3 microscale of an NVFP4 block; 0 and unused for FP8 |
| `data` | 128 | element *i* in `data[4i+3:4i]` (NVFP4, upper 64 bits zero) or `data[8i+7:8i]` (FP8) |

The payload packing is this design's choice.

The real value of NVFP4 element *i* is `E2M1(code_i) × E4M3(scale)`. NVFP4's
optional second-level per-tensor FP32 scale is not built. Weights therefore
arrive already scaled into the E4M3 range.

FP32 arithmetic used throughout (package functions):

- Round to nearest even.
- Subnormal inputs and results flushed to zero.
- Overflow gives infinity.
- NaN is not handled; the datapath never creates one.

## The mixed-precision lane

Each of the 16 lanes of a PE (`rtl/vmac_lane.sv`) holds **four dot-product
units**, one per (weight format, activation format) pair:

| unit | weight | activation | scales applied |
|---|---|---|---|
| FP4 | NVFP4 | NVFP4 | Sw · Sa |
| FP8 | FP8 | FP8 | none |
| FP4/8 | NVFP4 | FP8 | Sw |
| FP8/4 | FP8 | NVFP4 | Sa |

The two metadata bits of the current weight and activation blocks select
exactly one unit. The other three have their inputs forced to zero (data
gating), so they do not switch. An output multiplexer passes the active unit's
result on. Spending area on four separate units, instead of one wide shared
unit, buys energy: a 4-bit multiply costs much less than an 8-bit one whenever
both operands are NVFP4.

Inside a unit (`rtl/dot_unit.sv`), each element is decoded to an exact
integer:

- E2M1 in units of 2⁻¹.
- E4M3 in units of 2⁻⁹.

The 16 products are summed exactly. The sum is multiplied by the integer scale
magnitudes of the NVFP4 operands and aligned to a common fixed point with
lsb 2⁻²⁰. The exact block dot product is then rounded once to FP32 and added
to the incoming FP32 partial sum with one FP32 adder. A lane's result
therefore matches "round the exact block result, then add" for every format
pair. The testbenches check this bit for bit.

Each lane consumes one weight block and one activation block per cycle in
every format pair, so the math rate does not depend on the mix.

## Processing element: weight-stationary tiles

A PE (`rtl/pe.sv`) computes a tile:

```
out[l][n] = sum over k < n_kb of  W[l][k] · A[k][n]     (l = lane, 16 lanes; n < N columns; blocks of 16)
```

Its parts:

- **Weight buffer**: one per lane, `WB_DEPTH` = 256 blocks, so K = 4096.
- **Weight collector**: one register per lane.
- **Activation buffer**: one per PE, `NCOL × WB_DEPTH` = 4096 blocks.
- **Activation collector**: one per PE. Its block is broadcast to all lanes.
- **Output collector**: one per lane. It holds one FP32 partial sum per column (`NCOL` = 16).

Dataflow: for each K-slice *k*, every lane loads its weight block *k* into its
collector, where it stays (weight stationary). Then the N activation blocks of
that slice stream past, one per cycle. For each one the lane reads the
column's partial sum from its output collector, adds the block dot product
and writes it back. On the last slice the 16 finished sums of a column form
one output block of 16 consecutive output channels. That is exactly one block
of the next layer's input, so the PPU can quantize it directly.

Addressing: activation block (k, n) sits at buffer address `k·N + n`; weight
block k at address `k` of each lane's buffer.

### Timing

| phase | cycles |
|---|---|
| read weight buffers | 1 |
| load weight collectors | 1 |
| stream N activation blocks | N |
| **per K-slice** | **N + 2** |

- Activation path: buffer read (1 cycle), activation collector (1), lane compute and partial-sum write-back (same cycle).
- The last output block becomes valid `n_kb·(N+2) + 3` cycles after the cycle in which `start` is sampled. `tb_pe` checks this.
- The 2-cycle weight reload per slice costs 2/(N+2), i.e. 11% at N = 16.

### Long dot products

One command reduces at most `WB_DEPTH·16` = 4096 elements. A longer K is
chained over several commands, for example 11008 as 256 + 256 + 176 blocks:

- `k_first = 0` continues from the sums already in the output collectors instead of starting from zero.
- `k_last = 0` leaves the sums there instead of sending them on.
- The host refills the buffers between commands.

Only the command with `k_last = 1` produces output blocks. The fully reduced
sum is quantized once, which is what makes the per-block PPU cost negligible.

### Output and stalls

Output blocks leave through a valid/ready register, in column order, tagged
with their column. If the register still holds an unaccepted block when the
next finished sum arrives, the whole PE freezes for that cycle (`stall`).
`busy` stays high until the last block is accepted.

## Post-processing unit: choosing NVFP4 or FP8 per block

The PPU (`rtl/ppu.sv`) takes one block of 16 FP32 sums `y` per cycle. It
produces the block quantized in the format a sensitivity-weighted error comparison picks. The steps:

1. **VMax** (`vmax.sv`): `amax = max |y_i|`.
2. **Microscale** (`mu_scale.sv`):
   - `s = E4M3(amax × FP32(1/6))`, so the largest element maps to the top E2M1 value, 6 (dynamic max scaling).
   - A zero scale is replaced by the smallest subnormal, 2⁻⁹.
3. **Quantize both ways, in parallel**:
   - `quantize_fp4.sv`: E2M1 code of `y_i / s`, with ties to the even code. It works by comparing `|y_i|` with `s` times the seven midpoints {0.25, 0.75, 1.25, 1.75, 2.5, 3.5, 5}, so no divider is needed. Dequantized value `q4_i = s × E2M1`.
   - `quantize_fp8.sv`: E4M3 code of `y_i`, round to nearest even, saturating at ±448. Dequantized value `q8_i`.
4. **Decision** (`mpaq_unit.sv`):

   ```
   metric = Σ_i  g_i · ( (q4_i − y_i)² − (q8_i − y_i)² )
   fp8    = metric > threshold
   ```

   - `g_i` is the calibrated sensitivity of output channel *i*: the average squared gradient, i.e. the diagonal Fisher information, of the next layer's input channel.
   - The metric estimates how much the loss would grow if this block were stored in FP4 rather than FP8.
   - The terms are computed in FP32 and reduced by a balanced adder tree.
   - `threshold` is calibrated offline per model and held in a register. It sets what share of activation blocks stays FP8.
5. **Output mux**:
   - An FP4 block leaves with its codes and scale.
   - An FP8 block leaves with its E4M3 codes and `scale = 0`.
   - The metric is also output, for observation.

The PPU is a 3-stage pipeline:

| stage | contents |
|---|---|
| 1 | input register |
| 2 | scale, both code sets and dequantized values |
| 3 | decision and output register |

- It accepts a block every cycle.
- Latency is 3 cycles.
- Standard valid/ready on both sides; `in_ready = !out_valid || out_ready`.

The **vector unit** (`vector_unit.sv`) wraps the PPU with:

- the threshold register;
- the sensitivity table: `SENS_DEPTH` = 1024 entries of 16 FP32 values, one per 16-channel output block, indexed by the command's channel-block number `cmd_cb`;
- one input register, used while the table is read.

Latency from input to output is 4 cycles.

### Departure: the form of the decision metric

Two descriptions of the metric exist. One formula squares the difference of
the two quantization errors: Σ g (Δ₄ − Δ₈)². The hardware block diagram
instead computes the two squared errors in separate boxes and subtracts them.

This RTL follows the block diagram: Σ g (Δ₄² − Δ₈²). Only that form is large
exactly when FP4 is much worse than FP8 for the block. The sign convention
(FP4 error minus FP8 error, FP8 chosen when above the threshold) is this
design's reading.

## Top level

`fgmp_accel` (`rtl/fgmp_accel.sv`) holds P = 2 PEs and one vector unit.

- **One command for all PEs**: `start`, `n_cols`, `n_kb`, `k_first`, `k_last` and `cmd_cb` go to every PE. All PEs compute the same 16 output channels for different activation columns, as in the throughput model `M/L · K/16 · N/P` cycles. The host loads each PE's buffers with its own columns.
- **Arbitration**: a round-robin arbiter passes the PEs' output blocks to the vector unit. A PE that loses a cycle keeps its block, and stalls if another one is ready behind it.
- **Output**: quantized blocks leave on a valid/ready stream tagged `{PE index, column}`, together with the metric.
- **Memory system**: not modelled. Its traffic is the buffer-fill ports (`ab_*`, `wb_*`), the table and threshold ports (`sens_*`, `thr_*`) and the output stream.

A PE produces a block only every `n_kb` cycles per column, while the PPU takes
one block per cycle. One PPU can therefore serve many PEs. At K = 4096 about
256 PEs would saturate it. P is a parameter, but only P = 2 has been
simulated.

## What is this design's own choice

The paper supplies these:

- The block formats.
- The four-unit lane and its selection by metadata bits.
- Data gating of idle units.
- FP32 accumulation.
- The weight-stationary broadcast dataflow.
- The PPU chain VMax → scale → both quantizers → sensitivity-weighted comparison → output mux.
- One block per cycle in the PPU.
- L = 16 and BS = 16.

This design chose:

- **Storage sizes**: all buffer and table depths, and P = 2.
- **Exact block arithmetic**: the exact fixed-point block dot product with a single rounding to FP32, and the FP32 details (rounding, flush to zero, no NaN).
- **Quantizer rounding**: ties to even in both quantizers, the 1/6 scale rule with the zero-scale substitute, and E4M3 saturation.
- **PE sequencing**: the PE schedule (2 cycles of weight reload per slice), the buffer address map and the chaining of long K.
- **Interfaces**: the valid/ready handshakes and stall policy, the round-robin arbitration, the command and fill interface, and the block word packing.
- **Reset**: asynchronous active-low on all control state. Buffers and the sensitivity table are not reset and must be written before use.

## What is left out

- **Memory system**: not modelled. There is no double buffering, so buffer fills do not overlap compute.
- **Vector-unit functions beyond post-processing**: not described, so not built.
- **Offline steps**: calibrating sensitivities and the threshold, quantizing weights, and sensitivity-weighted weight clipping all happen in software before inference.
- **Clock gating**: idle units are data-gated only.
- **Area and energy**: the published figures (datapath 10356 µm², PPU 8848 µm², 25.7 pJ per PPU block in 5 nm at 1 GHz) cannot be reproduced here.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. A watchdog stops a hung run.

- **Reference models**: `tb/fgmp_tb_pkg.sv` holds models written independently of the RTL. They evaluate the formats with real arithmetic and find the nearest code by brute-force search, rather than decoding bits.
- **Block tests**: dot units and lanes are checked bit-exactly for all four format pairs. The quantizers are checked against brute-force nearest codes, including ties. The PPU and vector unit check latency, one-block-per-cycle throughput and backpressure. The PE checks exact sums, the cycle count, stalls and chained commands.
- **End-to-end test**: `tb/tb_fgmp_accel.sv` runs the top at its default parameters. It runs a full 16-column tile with K = 4096, a backpressured small tile, and a K = 11008 chain. It requires each of these to occur at least once:
  - all four dot-product units;
  - PE stalls;
  - arbitration conflicts;
  - both output formats;
  - no early output during a chain.

- **Workload test**: `tb/tb_workload_llama2.sv` runs a slice of a Llama-2-7B projection layer at default parameters: 64 output channels (four channel blocks, each with its own sensitivity entry) against 32 columns with K = 4096. Before each tile it sets the threshold as offline calibration would, between the 29th and 30th largest reference metric. Exactly 3 of the 32 blocks (about 10%) must then come out in FP8. It also checks each tile's time against the PE schedule, `256·18 + 3` cycles plus at most the PPU queue.

In both of these, metrics are compared with a tolerance of 10⁻⁵ × Σ g(Δ₄² + Δ₈²), because FP32 and the reference sum the terms in different orders. Codes and scales must match exactly.

Simulating with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fgmp_pkg.sv tb/fgmp_tb_pkg.sv $(ls rtl/*.sv | grep -v fgmp_pkg) \
    tb/tb_fgmp_accel.sv \
    --top-module tb_fgmp_accel
./obj_dir/Vtb_fgmp_accel
```

The packages must come first. Any block testbench works the same way with its `--top-module`. The top test
takes about a minute, most of it spent in the real-number reference model.

## Lint notes

Verilator's `-Wall` lint reports only warnings that do not affect the circuit. They are left as they are:

- Unused upper bits of an integer loop index in the arbiter.
- Unused sign bits: the E4M3 scale is always positive, and `amax` is a magnitude.
- Package constants reported as unused in the modules that do not need them.
- `SYNCASYNCNET` on the asynchronous reset, which also feeds the `disable iff` of the handshake assertions.
