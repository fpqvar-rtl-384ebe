# FP4 accelerator for visual autoregressive image generation

This RTL implements the compute core of an FPGA accelerator for VAR, a transformer that generates an image from coarse to fine scales. Every linear layer of the transformer runs on 4-bit floating-point (FP4) weights and activations. Three ideas make this cheap and accurate:

* **Lookup tables instead of FP arithmetic.**
  - An FP4 code has 16 values, so one LUT does quantization and another does multiplication.
  - The quantizer maps a scaled value to its 4-bit code through a small table.
  - The multiplier looks up an 8-bit product at the 8-bit address {activation, weight}.
  - Products are summed exactly as integers. The FP16 scaling factors are applied once per 128-element group.
* **Dual-format quantization (DFQ) for the FC2 input.**
  - The input of the second MLP layer comes after GeLU. It has a long positive tail and a short negative range.
  - Non-positive values are quantized to the uniform E1M2 grid with their own scale s⁻ = max|x⁻|/3.5.
  - Positive values are quantized to the E2M1 grid with s⁺ = max(x⁺)/6.
  - The sign bit of the code tells the multiplier which grid it is on.
* **Group-wise Hadamard rotation and a two-level pipeline.**
  - The activation outliers of the QKV projection and FC1 move from channel to channel as generation proceeds.
  - They are spread out by a 128-point Hadamard transform applied to each 128-element group. The transform's group is the same as the quantization group.
  - So rotation, quantization and matrix multiplication can stream group by group (first pipeline level).
  - Because the Condition MLP of a block depends only on the class condition, it can run on one GeMM unit while the other computes FC2 of the previous block (second pipeline level).

The sizes default to the FPGA configuration described for the design:

| Item | Value |
|---|---|
| Group size | 128 |
| Clock | 400 MHz |
| GeMM lanes | 36 FP4-E2M1 lanes + 24 DFQ lanes |
| Multiplies per lane | 128 per cycle |
| Peak rate | 60 · 128 · 2 · 400 MHz = 6144 GOPS |

## Number formats

| Format | Encoding | Values |
|---|---|---|
| FP4-E2M1 | sign, 3-bit magnitude code m | ±{0, 0.5, 1, 1.5, 2, 3, 4, 6} |
| FP4-E1M2 | sign, m | ±m/2 (±{0 … 3.5}, uniform) |
| FP8 product | S1 E3M4, bias 2; E = 0 is subnormal (M/32) | every E2M1×E2M1 and E1M2×E2M1 product (0.25 … 36) exactly |
| Adder tree | signed integer, units of 1/4 | group sum ≤ 128·36·4 < 2¹⁵ |
| Scales, activations | IEEE FP16 | |
| Accumulators | IEEE FP32, round-to-nearest-even, flush-to-zero | |

The FP8 layout, the integer unit and the FP32 accumulator are this design's choices. The source of the design says only that products are FP8, that they are converted to INT32 and accumulated, and that the result is then multiplied by the activation and weight scales.

`fpq_pkg.sv` holds every table. The product tables are computed at elaboration time from the code definitions (`build_e2m1_mul_lut`, `build_dfq_mul_lut`), so no data files are needed.

## The quantizers and their tables

A group of 128 FP16 values `x` is quantized with the scale `s = max|x| / 6`.

**Pass 1.** Find the maximum magnitude of the group. The FP16 scale output is `max · (1/6)`, with 1/6 rounded to FP16 (0x3155).

**Pass 2.** Form the integer `q = round(2·x/s)`, add 12, and look the 5-bit address up in a 25-entry table. The table gives each integer in [-12, 12] the code of the grid point nearest to `q/2`.

**Avoiding a divider.** Because `2x/s = 12·|x|/max`, q can be found without dividing. q counts the thresholds k = 0…11 for which `24·|x| ≥ (2k+1)·max`. Both sides are exact products of fixed-point FP16 magnitudes, 40 bits wide (`ratio_round` in the package).

**Two roundings.** Rounding to an integer first and then to the grid is a double rounding, and it is what an integer-addressed table does:
* Ties in the integer step go away from zero.
* A value just above a grid midpoint (for example x/s = 2.45 → q = 5 → 2.5) can end up on the upper grid point (3) although 2 is closer.

The testbenches model this behaviour exactly.

**DFQ quantizer.** It does the same with two maxima, one for the x ≤ 0 side and one for the x > 0 side. Zero goes to the negative side.
* Negative side: an 8-entry table at address `7 − round(7·|x|/max⁻)`, on the E1M2 grid.
* Positive side: a 13-entry table at address `round(12·x/max⁺)`, on the E2M1 grid.
* Both scales are FP16 outputs: s⁻ = max⁻·(1/3.5), s⁺ = max⁺·(1/6).

**Correction to the printed tables.** The published tables print one entry each as `1101`: entry 11 of the E2M1 table and entry 6 of the DFQ negative table. That entry must encode −0.5; it is the mirror of entry 13 (`0001`) and lies between the codes for −1 and 0. The RTL uses `1001`, the code of −0.5. With the printed value, every input that rounds to −0.5 would come out as −3 (or −2.5 in E1M2).

**Timing.** Both quantizers have two register stages and take one group per cycle under valid/ready. A stalled output holds its data; an assertion checks this.

## Lanes: LUT multiply, exact sum, one FP multiply per group

`dot_pe` is one output channel. Each cycle it takes 128 activation codes, 128 weight codes and the three scales:
* sx: the activation scale, or s⁺ in DFQ mode;
* sx_neg: s⁻ in DFQ mode;
* sw: the weight scale.

Its three stages are:

1. **Multiply and sum.** 128 LUT multipliers (`fp4_e2m1_mul` or `dfq_mul`), FP8→integer conversion, and a binary adder tree.
   - In DFQ mode there are two trees. The negative-format and positive-format products are summed separately, because they carry different scales.
2. **Scale.** The integer sum is converted to FP32 and multiplied by `sx·sw`. In DFQ mode the two scaled sums are added.
3. **Accumulate.** The group result is added to the FP32 accumulator.
   - `first` restarts the accumulator.
   - `last` publishes the result.
   - The result is valid 3 cycles after the last group.

`gemm_unit` puts `LANES` lanes side by side and runs a job:
* A job is `n_tiles` output tiles. Each tile covers LANES channels and runs over `n_groups` groups (K = 128·n_groups).
* Each cycle one quantized activation group is broadcast to all lanes.
* In the same cycle one weight word is read from the buffer at `w_base + tile·n_groups + group`.
* **Weight word layout.** Lane `l` occupies bits `[l·528 +: 528]` of the word. Its low 512 bits are the 128 4-bit codes, element `i` at `[4i +: 4]`. Its top 16 bits are the FP16 scale of that weight group.
* The producer streams the activation row once per tile. There is no activation reuse buffer.
* A tile's result is valid 4 cycles after its last group: one cycle for the buffer read and three lane stages.
* `done` marks the last tile.

The dataflow is this design's choice: output-stationary, one channel per lane, one group per cycle.

## Group-wise Hadamard transform unit (GHTU)

`ghtu` applies the orthonormal 128-point Hadamard transform H/√128 to one FP16 group.
* **Butterflies.** The fast Walsh–Hadamard butterflies run in natural (Sylvester) order. Stage s pairs elements i and i+2^s.
* **Schedule.** One stage per cycle on 128 FP16 adders, seven stages in all. A final cycle multiplies by 1/√128 (0x2DA8).
* **Latency.** 9 cycles for a rotated group. With `in_rotate = 0` the group is forwarded in 2 cycles.
* **When to bypass.** The top rotates only the activations of the "main" jobs (QKV projection / FC1). It bypasses the Condition MLP, whose input is not rotated.
* **Throughput.** The unit takes one group at a time; `in_ready` is high only when it is idle. While it works on one group, the quantizer and GeMM downstream work on the previous ones. That is the first pipeline level.

Not given by the source and chosen here: the stage schedule, FP16 precision, and placing the normalisation at the end.

## Two-level pipeline and the top level

`pipeline_scheduler` orders three kinds of job per transformer block:
* the Condition MLP (`JOB_COND_MLP`) on GEMM1;
* the main job (`JOB_MAIN`), standing for QKV projection + output projection + FC1, on GEMM1;
* FC2 (`JOB_FC2`) on the DFQ unit GEMM2.

The dependency rules are:

* The main job of block i needs that block's Condition MLP, and FC2 of block i−1 must be finished.
* FC2 of block i needs the main job of block i.
* The Condition MLP of block i+1 may start once the main job of block i is done.
  - With `overlap_en = 1` it does not wait for FC2 of block i. This is the second pipeline level.
  - With `overlap_en = 0` it waits, which gives the sequential schedule for comparison.
* `overlap_cycles` counts the cycles in which both GeMM units were busy.

`fpqvar_top` wires the parts together:

```
act1 (FP16 groups) ─► GHTU ─► Quant1 (E2M1) ─► GEMM1 (36 lanes) ─► res1 (FP32 ×36)
act2 (FP16 groups) ─────────► Quant2 (DFQ)  ─► GEMM2 (24 lanes) ─► res2 (FP32 ×24)
                                                 ▲          ▲
wa_*/wb_* (weight writes) ─► global buffer: bank A (GEMM1), bank B (GEMM2), 64 words each
scheduler ─► pe1_start/pe1_job/pe1_blk, pe2_start/pe2_blk (job announcements)
```

**Job descriptors.** `mlp_job`, `main_job` and `fc2_job` are `gemm_job_t` structs: `n_groups`, `n_tiles` and `w_base`.

**What stays outside.** The special function unit, the AXI port, the processor system and the DRAM are not part of this RTL; the top's ports sit where they would connect:
* Whatever produces activations reacts to the job announcements. It sends n_tiles·n_groups groups on the matching `act` port.
* It writes weights into the buffer before a job starts.

**Monitor.** `l1_overlap` is high when the GHTU accepts or works on a group while Quant1 still holds the previous one. It is a monitor of the first pipeline level.

## Sizes and where they come from

| Parameter | Default | Origin |
|---|---|---|
| G (group) | 128 | stated group size of quantization and rotation |
| LANES1 / LANES2 | 36 / 24 | derived from the reported figures, see below |
| DEPTH | 64 words per bank | own choice: one FC2 tile of VAR-d30 needs 7680/128 = 60 words |
| BW | 8 | own choice: block counter (VAR-d30 has 30 blocks) |

**How the lane counts were derived.** No lane count is given.
* The reported peak is 6144 GOPS at 400 MHz. That is 15360 operations, or 7680 MACs, per cycle: 60 lanes of 128.
* The reported DSP split between the two GeMM units is 576 : 384 = 3 : 2, which gives 36 and 24 lanes.
* That is 16 DSPs per lane in both units, which is consistent.

**What fits.** At these sizes every linear layer of VAR-d30 runs tile by tile, but the weights of a whole layer do not fit:
* The buffer holds 253 KB. The model has about 1 GB of FP4 weights.
* So weights must be refilled between jobs from outside.
* Larger models with FC2 K > 8192 (e.g. width 2304) need DEPTH ≥ 72.

## Departures and open points

* The two mis-printed LUT entries are corrected, as described above.
* **Scale multiplier precision.** The reference lane drawing labels the scale multiplier "FP16 Mul".
  - Here the two FP16 scales are multiplied exactly: an FP16×FP16 product fits an FP32 significand.
  - The group sum, the scaled product and the accumulator are FP32, not FP16. This avoids FP16 overflow for large groups.
* **Quantizer dividers.** The quantizer drawing uses dividers for the scale and for x/s. They are replaced by exact threshold comparisons that give the same integer.
* **Sign test in the DFQ quantizer.** The algorithm puts x = 0 on the negative side; the drawing tests "≥ 0" for the positive side. The algorithm is followed. For zero both choices give the same code and the same maxima.
* Choices not fixed by the source:
  - the FP8 product format;
  - the FP32 scale multiply and accumulator;
  - the divider-free rounding and its tie rule;
  - the register depth of every block;
  - the valid/ready handshakes and the synchronous active-low reset.
* The FP16 scale outputs use rounded constants 1/6 and 1/3.5, with a relative error of about 2.5·10⁻⁴. The codes themselves are computed from exact ratios.
* Subnormal inputs to the FP adders and multipliers are flushed to zero.
* The "main" job merges QKV projection, output projection and FC1 into one GEMM1 job, and attention itself is not modelled.
* The FC2 input is not rotated online.
* The DFQ GeMM lanes and the E2M1 lanes share one lane design, selected with the `DFQ` parameter.
* **Not built:**
  - the special function unit (LayerNorm, Softmax, GeLU, attention), because its design is only referenced;
  - the AXI/processor/DRAM side;
  - the FP6 (W6A6) mode, which is evaluated only in software.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a cycle watchdog. `tb_pkg.sv` holds the reference models:
* FP16/FP32 decoding;
* code values;
* nearest-grid quantization with the same two-step rounding.

The references work in `real` arithmetic, independently of the RTL.

| Testbench | What it checks |
|---|---|
| `tb_fp4_e2m1_mul`, `tb_dfq_mul` | all 256 (512) products exactly |
| `tb_fp4_e2m1_quantizer`, `tb_dfq_quantizer` | ~40 random and corner groups (zeros, ties, all-negative, subnormals); codes and scales; 2-cycle latency; one group per cycle; back-pressure |
| `tb_dot_pe` | both modes; multi-group accumulation against real-valued dot products; 3-cycle latency |
| `tb_gemm_unit` | two jobs each for an E2M1 and a DFQ unit; tile addressing; 4-cycle result latency |
| `tb_ghtu` | transform against a real-valued fast Hadamard transform; single-spike and integer groups; 9-cycle and 2-cycle latency; bypass; back-pressure |
| `tb_global_buffer` | both banks; read latency and hold |
| `tb_pipeline_scheduler` | dependency order of every issue; overlapped vs sequential makespan |
| `tb_fmu` | both pipelines running at once |
| `tb_fpqvar_top` | full default size; two blocks, run once overlapped and once sequential; all results against the reference; counts rotations, bypasses, stalls, first- and second-level overlap, both DFQ formats and multi-tile jobs, and fails if any of them never happened |
| `tb_workload_var_d30` | default size with the reduction depths of a VAR-d30 block (K = 1920 = 15 groups for the Condition MLP / QKV / FC1 input, K = 7680 = 60 groups for FC2), one or two output tiles per layer; same reference and counters |

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fpq_pkg.sv tb/tb_pkg.sv tb/tb_fpqvar_top.sv --top-module tb_fpqvar_top -o sim
./obj_dir/sim
```

Module files are found through `-Irtl`. `tb_fpqvar_top` runs at the default sizes. It builds in a minute or two and simulates in about a second.
