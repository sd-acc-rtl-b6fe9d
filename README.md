# A unified convolution / attention core for Stable Diffusion

The U-Net inside Stable Diffusion mixes two kinds of work:

- Convolutions with 1x1 and 3x3 kernels, at stride 1 and 2.
- Transformer blocks: matrix products plus softmax, layernorm and GELU.

Accelerators usually handle convolutions either with an im2col reformatting step or with a special dataflow. The nonlinear operators are usually handled with extra passes over memory. This core avoids both:

- **Every linear operator becomes a stream of plain matrix products** on one weight-stationary systolic array (32x32, fp16).
  - A KxK convolution is split into K·K separate 1x1 convolutions.
  - Each 1x1 convolution is an ordinary matrix product over all positions of the feature map.
  - The missing "sliding window" is restored by *where* each product's result is added. Partial sums for input position `l` go to output position `l - (dr·W + ds)`, where `(dr, ds)` is the kernel tap offset.
  - So a convolution needs only two things beyond a matmul engine: an address generator, and an adder next to the output buffer.
- **Softmax and layernorm are split into two halves that ride on data streams that exist anyway.**
  - The statistics (maximum and exponential sum, or sum and square sum) are gathered while the preceding matrix product writes its results. This is the *NCA* stage, "numerical characteristic acquisition".
  - The element-wise normalisation is applied while the following matrix product reads its operands. This is the *Norm* stage.
  - The softmax statistics are updated tile by tile (online softmax). So the work starts with the first tile and never needs the whole sequence on chip.

The RTL in `rtl/` implements this core at its full size: a 32x32 array, a 32-lane vector unit and a 2 MB global buffer. It is driven by a small command set. The sections below explain the two main ideas in detail, then the datapath, the command interface, the number format and how the Stable Diffusion workloads map onto it.

## 1. Convolution as shifted matrix products

### The mapping

Take a feature map of `H x W` positions, flattened row-major (`l = h·W + w`), with `C_in` channels. A 3x3 convolution with zero padding 1 is:

    y[o] = sum over taps (r,s), r,s in 0..2, of  Wt[r][s] · x[o + (r-1)·W + (s-1)]

Fix one tap `(r, s)` and write `dr = r-1`, `ds = s-1`:

- `Wt[r][s]` is a `C_out x C_in` matrix.
- The product `Wt[r][s] · x[l]` for every input position `l` is one matrix multiplication.
- Its result for input `l` belongs to output `l - (dr·W + ds)`.

The nine taps therefore give nine matmuls whose outputs land at nine fixed address offsets:

| tap (row-major 1..9) | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|
| output address | l+W+1 | l+W | l+W-1 | l+1 | l | l-1 | l-W+1 | l-W | l-W-1 |

Near the map border some shifted results have no valid destination. For example, the left neighbour tap at column 0 would otherwise wrap into the previous row. The address generator on the output side tracks the row and column of each destination. It raises an *edge flag* when the destination falls outside the map, and the adder drops that vector (`evt_skip` counts such drops).

The array is weight-stationary:

- One 1x1 slice (`C_out^0 = 32` rows by `C_in^0 = 32` columns) is shifted into the PE weight registers.
- Then the input positions stream through, one 32-channel vector per cycle.
- The output is one 32-channel partial-sum vector per cycle.
- The vector unit reads the old value at the mapped output address, adds, and writes it back.
- Larger channel counts are tiled in chunks of 32: `init` = 1 on the first `C_in` tile, 0 on the rest, which accumulate.

### No clearing pass

The centre tap (`dr = ds = 0`) touches every output position exactly once. The controller therefore runs it first, with *overwrite* instead of *add*. Every output word is initialised by real data before the other eight taps add to it. The output buffer never needs a separate clear.

### Stride 2 (down-sampling)

For a stride-2 convolution the output is `H/2 x W/2` and output `(p, q)` reads input `(2p+dr, 2q+ds)`. Here the *input* side carries the stride:

- Within a row the input address advances by 2.
- When moving to the next output row it advances by `W+2` (where `W` is the input width).
- The output side is a plain scan.
- The edge flag moves to the input side and marks the padding positions. A flagged read is replaced by a dropped result.

### Output stride 2 (transposed convolution, up-sampling)

With `ostride2` the stride sits on the output side instead:

- Input `(p, q)` and tap `(dr, ds)` add into output `(2p+dr, 2q+ds)` of a `2H x 2W` map. This is the geometry of a stride-2, padding-1, output-padding-1 transposed convolution.
- Taps 5, 6, 8, 9 each cover one of the four output phases completely (in the 0..8 numbering of the RTL: 4, 5, 7, 8). The controller runs them first, each with overwrite.
- Stable Diffusion up-samples by nearest-neighbour interpolation. On this core that is four 1x1 commands with identity weights and `ostride2`, with output base offsets 0, 1, 2W and 2W+1.

### What it costs

A 3x3 CONV on `P` positions takes `9·(32 + P + 72)` cycles at full size:

- 32 cycles of weight shifting per slice.
- One cycle per position.
- 72 cycles to drain the pipeline. That is the input buffer (1), the Norm pipeline (4), the array (63) and the adder (4).

The full-size test bench checks this count exactly. For a 1x1 CONV the factor 9 becomes 1. The drain is a cost of this implementation's strictly sequential control (see section 6), not of the mapping.

## 2. Nonlinear operators in two streaming stages

Softmax over a sequence, and layernorm over a sequence, each need global statistics before any element can be normalised. In attention, `P = softmax(Q·K^T)` is followed by `P·V`. The core uses that structure:

- **NCA** runs on the stream of the *preceding* product's results, as they are written to the output buffer.
  - **Softmax.** Each of the 32 lanes (one per array row, i.e. one query per lane when the keys stream as positions) tracks the running maximum with a comparator. Elements also enter a FIFO one tile deep (32 elements). When a full tile has been stored, the running maximum is frozen as `new_max`. As the FIFO plays the tile back out, the lane adds up `exp(x - new_max)`. The accumulator is loaded rather than added on a tile's first element, so no clear cycle is needed. At the end of the tile the partial sum `ES_n` and `new_max` go to a shared ALU. The ALU folds them into the row's running sum: `ES ← ES · exp(pre_max − new_max) + ES_n`, then `max ← new_max`.
  - **Layernorm.** Two adders accumulate `Σx` and `Σx²` (the square comes from a multiplier). At the end the ALU computes `mean = Σx/N` and `σ = sqrt(Σx²/N − mean²)`.
- **Norm** runs on the stream of the *following* product's operands, between the input buffer read and the array input. It is a 4-stage pipeline per lane:
  - softmax: `exp(x − xmax) / ES`
  - layernorm: `(x − mean) / σ`
  - GELU: `x · sigmoid(1.702x)`, computed as `x / (1 + exp(−1.702x))`
  - bypass: `x`

  Lane `c` of the operand vector uses the statistics of row `c`. So a product written with C_out = 32 query rows is normalised per row when it is read back with those rows as the 32 input channels.

**Shared ALU.** The array's outputs are skewed: row `r` finishes its tile a cycle after row `r−1`. One ALU with a two-entry-per-row register stack therefore serves all 32 rows in turn. A round-robin pointer visits one row per cycle, so a tile result waits at most 32 cycles. This is why the tile length must be at least the number of lanes.

**Long sequences.** A sequence longer than one input-buffer load is issued as several CONV commands. All but the first carry `nca_cont`, which keeps the running maximum, sum and count. The softmax update formula is what makes this exact, not approximate. The final tile of a sequence may be short.

The latency cost:

- Softmax NCA finishes about one tile (32 cycles) after the last result.
- Layernorm NCA finishes a few cycles after it.
- Norm adds 4 cycles to the operand path.

## 3. Datapath

    DRAM ──(external port)── global buffer 2 MB ──LOAD_IN──► input buffer ──► [VPU Norm] ──► systolic array 32x32
                                   ▲          └──LOAD_WT──► weight buffer ──(shift)──────────────┘ (weights)
                                   │                                                       │ partial sums
                                 STORE                                                      ▼
                                   └────── output buffer (2 banks) ◄──read/add/write── accumulation unit ──► [VPU NCA]
                                                                                          ▲
                                        address generators + edge detector (input side, output side)

| block | module | what it holds / does |
|---|---|---|
| processing element | `pe` | Wt-Reg, IA-Reg, OA-Reg, one fp16 multiplier and adder |
| systolic array | `systolic_array` | H x W PEs; C_in across the width, C_out across the height; input skew and output de-skew inside, latency W+H−1 |
| address generator | `addr_gen` | incremental base / step / row-step addresses and the row/column edge detector |
| input buffer | `input_buffer` | 1024 positions x 32 fp16 |
| weight buffer | `weight_buffer` | 288 columns of 32 weights (nine 32x32 slices) |
| output buffer | `output_buffer` | 2 banks x 1024 positions x 32 fp16; one accumulates, the other drains |
| global buffer | `global_buffer` | 32768 words x 32 fp16 = 2 MB; external and internal port |
| accumulation unit | `accumulation_unit` | read–add–write of partial sums with forwarding, overwrite on `init`, edge-flag drop |
| VPU lane | `vpu_lane` | NCA (comparator, FIFO, exp, accumulators) and Norm pipeline of one row |
| VPU ALU | `vpu_alu` | shared row-by-row ALU with the register stack of statistics |
| VPU | `vpu_func_array` | 32 lanes + ALU |
| controller | `controller` | command sequencer and the per-slice address configurations |
| top | `sdacc_top` | everything above, wired as shown |

**Pipeline alignment.** The output address, edge flag, `init` and `last` marks of each streamed position travel beside the data in a delay line, 1 + 4 + 63 cycles long. An assertion checks that the array's own valid bit and the delay line stay in step.

## 4. Command interface

`sdacc_top` accepts one `cmd_t` (defined in `sdacc_pkg`) per `cmd_valid`/`cmd_ready` handshake. `busy` is high until the command has finished. Data reaches the global buffer through its external port (`ext_*`, one 32-element word per cycle, read latency 1). That port stands in for the DDR interface.

| op | fields used | effect |
|---|---|---|
| `OP_LOAD_IN` | `gb_addr`, `buf_addr`, `len` | copy `len` words from the global buffer to the input buffer |
| `OP_LOAD_WT` | same | copy to the weight buffer |
| `OP_STORE` | same | copy from the drain bank of the output buffer to the global buffer |
| `OP_SWAP` | — | exchange the output buffer banks |
| `OP_CONV` | `in_h`, `in_w`, `in_base`, `out_base`, `wt_base`, `k3`, `stride2`, `ostride2`, `init`, `nca_mode`, `nca_cont`, `norm_mode` | one convolution or matrix product (below) |

Data layouts:

- **Activation word.** One position, 32 channels: word `l = h·in_w + w` of a map.
- **Weight word.** One column of a 1x1 slice: element `r` is `Wt[c_out=r][c_in=c]`. Slice `k` (row-major tap index 0..8) column `c` sits at `wt_base + 32·k + c`. A 1x1 kernel uses slice 0.
- **Output word.** One output position, 32 output channels.

Typical sequences:

- **3x3 convolution of a 64-channel map into 32 channels:**
  1. `LOAD_IN` tile 0 and `LOAD_WT` its nine slices.
  2. `CONV k3 init=1`.
  3. `LOAD_IN` tile 1 and `LOAD_WT` its nine slices.
  4. `CONV k3 init=0`.
  5. `SWAP`, then `STORE`.
- **Attention scores with softmax:**
  1. Keys are loaded as positions and 32 queries as the weights.
  2. `CONV` (1x1) with `nca_mode = NCA_SOFTMAX` gathers the statistics. Add `nca_cont` on later key tiles.
  3. `SWAP` and `STORE` the scores.
  4. Reload them and run the next product with `norm_mode = NORM_SOFTMAX`.

  Layernorm and GELU work the same way.

## 5. Number format

All arithmetic is IEEE binary16. The functions live in `sdacc_pkg` and are combinational:

- Add, multiply and divide round to nearest even.
- Results too small to represent become zero, and subnormal inputs are treated as zero. NaN is not produced deliberately.
- `exp` computes `2^(x·log2 e)`. It splits the exponent into integer and fraction parts and approximates `2^f` with a cubic polynomial. Over every fp16 input whose result is a normal fp16 number, the largest relative error is 5.7e-4, close to half an fp16 ulp. Results below the normal range, for inputs under about −9.7, become zero. Inputs above +11.25 saturate to infinity.
- `sqrt` uses a restoring square root on the significand.

The test benches compare with double-precision references. They accept relative errors of 2–3% on softmax and 2% on convolutions, plus an absolute error that grows with the accumulation length.

## 6. Where this implementation departs from, or adds to, the published design

- **Buffer sizes.** The input, weight and output buffer sizes are not published; the sizes here are this implementation's choice. The global buffer size (2 MB), the array size, the lane count and fp16 are the published ones. The clock (200 MHz in the published evaluation) is not part of the RTL.
- **EXP units.** The published VPU reuses one set of EXP, adder, multiplier and divider arrays between the softmax, layernorm and GELU datapaths. Here the NCA and Norm stages each have their own exponential unit and divider, so NCA of one operation can overlap Norm of another.
- **Control.** The controller is strictly sequential:
  - It runs one command at a time.
  - It shifts weights in without double buffering.
  - It drains the pipeline between kernel slices.

  The dual-bank output buffer therefore only separates results from accumulation. It does not yet hide the store time.
- **Layernorm.** No epsilon is added to the variance. A negative variance caused by rounding is clamped to zero.
- **Not built in hardware.** Phase-aware sampling, which decides which U-Net blocks run at each denoising step, is a host-side schedule. The adaptive choice between input reuse, weight reuse and layer fusion is a compile-time decision about which command sequence to issue. Both shape the command stream; neither is logic in the core. The DRAM itself is outside the core.
- **Synthesis size.** Every module lints and elaborates at full size. Coarse synthesis with yosys behaves differently by block:
  - The PE, address generator, buffers, VPU lane, ALU and controller synthesise.
  - The 1024-PE array, the 32-lane VPU and the complete top need more than 16 GB of memory.
  - The accumulation unit's run time grows about quadratically with the lane count: 35 s for 8 lanes and 155 s for 16 lanes. So 32 lanes take roughly ten minutes.

## 7. Stable Diffusion on this core

- **Convolution sizes.** At a 64x64 latent (SD 1.x/2.x) a full-resolution 3x3 convolution has 4096 positions. The input buffer holds 1024, so a layer runs in horizontal bands of 16 input rows: 14 output rows plus a one-row halo on each side. The halo outputs are discarded. At SDXL's 128x128 latent the bands are 8 rows (6 output rows). Channels are tiled in 32s.
- **Attention sizes.** Attention over 4096 tokens runs as four 1024-key tiles joined with `nca_cont`.
- **Off-chip traffic.** The 2 MB global buffer cannot hold the largest activations (64·64·320 fp16 = 2.6 MB). How tiles are staged between DRAM and the global buffer is up to the host's command stream.

## 8. Verification

Each block has a self-checking test bench in `tb/` that prints `TB_RESULT checks=N failures=M`:

| test bench | what it checks |
|---|---|
| `tb_pe` | multiply–add, weight shift, activation forwarding |
| `tb_systolic_array` | random matrix products against a reference on a non-square array, arrival exactly W+H−1 cycles after input |
| `tb_addr_gen` | output addresses and edge flags of all nine slices (stride 1), input addresses and padding flags (stride 2), one address per cycle |
| `tb_input_buffer`, `tb_weight_buffer`, `tb_output_buffer`, `tb_global_buffer` | random and corner-address read/write against a model, read latency, bank swap; the global buffer at full 2 MB through both ports |
| `tb_accumulation_unit` | exact read–add–write with back-to-back same-address updates, init, drops |
| `tb_vpu_lane`, `tb_vpu_alu`, `tb_vpu_func_array` | softmax statistics across tiles, layernorm statistics, Norm outputs for all modes, latency 4 |
| `tb_controller` | copy timing, slice order, weight read order, per-slice address configurations, cycle counts, NCA wait |
| `tb_sdacc_top` | end-to-end at 8x8 (see below) |
| `tb_sdacc_top_full` | the same program at full size (32x32, 2 MB, 8x16 maps), including an exact cycle count of a 3x3 CONV |

The end-to-end program does the following:

1. Writes random data through the external port.
2. Runs a padded 3x3 convolution plus a second channel tile.
3. Runs a stride-2 3x3 convolution.
4. Runs a transposed 3x3 convolution and a nearest 2x up-sampling.
5. Runs softmax and layernorm, each as a score product split over two commands with continued statistics, followed by a normalised read-back.
6. Runs GELU.
7. Reads every result back through the external port and compares it with a real-valued reference.

It counts each mechanism and fails if any one of them never occurred. The mechanisms are edge drops, 3x3 slicing, stride 2, channel accumulation, softmax, layernorm, GELU, bank swap, statistics continuation, transposed convolution and up-sampling.

To run a test bench with Verilator:

    verilator --binary --timing --assert -y rtl rtl/sdacc_pkg.sv tb/tb_fp16_pkg.sv tb/tb_sdacc_top.sv --top-module tb_sdacc_top
    ./obj_dir/Vtb_sdacc_top

The full-size bench takes about 2.5 minutes to compile and under a second to run.

`tb_fp16_pkg` provides the conversions between fp16 and `real` that the test benches use.

## 9. Remaining lint warnings

`verilator -Wall` reports only the following:

- Unused bits. The top uses only the low address bits of the generators, and some functions in the shared package are not used by every module.
- Unconnected `busy` outputs of the two address generators.
- In `vpu_lane`, a FIFO memory without reset, next to an assertion that uses the reset. The FIFO contents are always written before they are read.

Each is noted in the opening comment of its module.
