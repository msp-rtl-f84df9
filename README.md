# MSP: a mixed-scheme, multi-precision GEMM accelerator in SystemVerilog

An FPGA has two kinds of arithmetic resources: DSP slices, which multiply, and
a much larger number of LUTs, which can shift and add. An accelerator whose
weights are all fixed-point integers keeps only the DSPs busy. The MSP
quantization scheme (Chang et al., "MSP: An FPGA-Specific Mixed-Scheme,
Multi-Precision Deep Neural Network Quantization Framework") makes each
layer use both. Within every layer, each row of the weight matrix (one
output channel) is quantized in one of three ways:

| row group | share | number format | arithmetic | core |
|---|---|---|---|---|
| SPoT rows | 65 % | 4-bit *sum of two powers of two* | two shifts and one add (LUTs) | GEMM_SPoT |
| fixed rows | 30 % | 4-bit fixed point | multiplier (DSP) | GEMM_fixed |
| 8-bit rows | 5 % | 8-bit fixed point | multiplier (DSP) | GEMM_8-bit |

The 8-bit rows are the 5 % of rows with the largest 4-bit quantization error.
Keeping them in 8 bits preserves accuracy even when the first and last
layers are quantized too. Every layer, first and last included, uses the same
split, so one hardware configuration serves the whole network. Nothing is
reconfigured between layers, and no PE sits unused while "special" layers run.

This RTL implements the hardware side of that idea. It has three GEMM cores,
one per row group, and their PE arrays are sized 65 : 30 : 5. All three cores
read the same activations in lock step. For a layer split in the same ratio,
they start and finish together.

## The SPoT number format

The SPoT format is the least obvious part of the design. A SPoT weight is
`sign × (2^a + 2^b) × α`. The code holds the sign and two exponent fields:

```
 4-bit code (default):   [3]=sign  [2:1]=e1 (larger-range term)  [0]=e2 (smaller-range term)
 6-bit code (M1_W=3, M2_W=2): [5]=sign [4:2]=e1 [1:0]=e2
 term(e) = 0 if e == 0, else 2^(e-1)
 value   = (sign ? +1 : -1) * (term(e1) + term(e2))        (times the row's scale α)
```

So a product with an activation `x` is `±((x << (e1-1)) + (x << (e2-1)))`,
where a zero code drops its term. `spot_mult` computes exactly that.

The 4-bit magnitudes are {0,1,2,4} + {0,1} = 0, 1, 2, 3, 4, 5. Unlike plain
power-of-two levels, these are almost evenly spaced, which is why SPoT loses
little accuracy compared with 4-bit fixed point. Worked examples from the
paper's encoding figure, which this RTL reproduces and the testbench checks:

| code | meaning |
|---|---|
| `0_11_1` (4-bit) | −(2^2 + 2^0) = −5 |
| `1_100_10` (6-bit) | +(2^3 + 2^1) = +10 |

Three points of this encoding are not stated consistently in the paper's
text. This RTL follows its encoding figure on all three:

* **Sign polarity.** A sign bit of 1 means positive and 0 means negative, as
  all three examples in the figure print it. This is `SPOT_SIGN_NEG` in
  `msp_pkg`; change that constant for the opposite convention.
* **Exponent code.** The figure decodes the code minus one (`100` → 3).
  One sentence of the text decodes the code itself (`011` → 3). Another
  sentence of the text contradicts that one.
* **Field order.** The field next to the sign is the wider, larger-range term.
  One sentence of the text swaps the names of the two fields.

The text speaks of right shifts (fractional levels such as 2^−3). The RTL
uses left shifts on integer levels. The two differ only by a constant factor
that belongs in the row scale α.

Fixed-point weights are plain two's-complement integers of 4 or 8 bits.
Activations are unsigned 4-bit values, as after a ReLU.

## How a layer is computed

The accelerator computes one GEMM tile, `Y[M×N] = W[M×K] · X[K×N]`. Each row
of `W` is an output channel, each column of `X` an output pixel, and K is
`16 × ksteps` (rows are padded with zero weights when K is not a multiple of 16).

```
              host writes                    host writes
        activations (n*ksteps+k)        weights (p*ksteps+k), row maps (p)
                  |                                 |
            +------------+        +-----------------+------------------+
            | act_buffer |--X-->  | gemm_core SPoT   65 rows x 16 lanes |--> s_res_*
            |  16 x 4 b  |  word  | gemm_core FIXED4 30 rows x 16 lanes|--> f_res_*
            +------------+  to    | gemm_core FIXED8  5 rows x 16 lanes|--> e_res_*
                  ^         all   +------------------------------------+
                  |                     ^  step (w_addr, pass, col, first, last, en)
            +-------------------------------+
            | msp_controller (lock step)    |<-- start, cfg
            +-------------------------------+
```

**Passes.** A core holds its rows in blocks of BLK_OUT rows, one block per
*pass*. In pass `p`, every core works on its local rows
`p·BLK_OUT … p·BLK_OUT + BLK_OUT − 1` at once.

**Loop nest.** The controller runs `for pass, for column n, for k`, issuing
one step per clock. In each step, every core reads one weight word (BLK_OUT ×
16 weights) and the shared activation word (16 activations of column n). Each
row PE forms 16 products, adds them and accumulates them. After `ksteps`
steps, the core delivers BLK_OUT finished dot products for column n.

**Running out of rows.** When a core has no rows in a pass
(`p·BLK_OUT ≥ rows`), its `en` is low and it idles. The controller counts
those cycles in `idle_cycles`. The run ends after the first pass in which
every core has reached its last row:

```
passes = max( ceil(rows_spot/65), ceil(rows_fix4/30), ceil(rows_fix8/5) )
steps  = passes × ncols × ksteps            (= run_cycles, one per clock)
```

For a 65:30:5 row split, the three ceilings are equal, so no core idles. The
paper's aim of making LUTs and DSPs "finish simultaneously" shows up here as
`idle_cycles == 0`.

**Row maps.** The 8-bit rows of a layer are wherever the quantization error
happens to be largest, and likewise the SPoT and fixed rows. Each core
therefore has a *row map*: for pass `p`, one word gives the layer row index of
each of its BLK_OUT rows. Results come out tagged with that index, so the
receiver can scatter them into the output tensor without knowing the split.

## Timing

* All buffers have one cycle of read latency, like block RAM.
* A step presented by the controller in cycle t is accumulated in cycle t+1.
* After the last step of a column, `*_res_valid` is high for one cycle. It
  carries the column (`*_res_col`), a valid bit per row (low for rows past the
  core's row count in its final pass), the layer row indices and the sums.
* Per run, timed from the clock edge that samples `start`:
  * one edge per step follows that edge;
  * `done` pulses two edges after the final step, one cycle after the last
    result word;
  * `busy` is high from `start` until `done`.
* Result words arrive at most once per `ksteps` cycles per core, and there is
  no back-pressure: the receiver must take every word.

## Loading a layer (host side)

All loads go through plain write ports (`*_wr_en`, address, data); the
packed arrays index `[row][lane]`:

| buffer | address | word contents |
|---|---|---|
| `a_wr_*` activation buffer | `n·ksteps + k` | `X[16k+i][n]` in lane i |
| `ws_/wf_/w8_wr_*` weight buffer of a core | `p·ksteps + k` | `[r][i]` = weight of local row `p·BLK_OUT+r`, input `16k+i` |
| `rms_/rmf_/rm8_wr_*` row map of a core | `p` | `[r]` = layer row of local row `p·BLK_OUT+r` |

Then drive `cfg` (`ksteps`, `ncols`, and the three row counts) and pulse
`start`. Unused rows of a core's last pass may hold any weights and map
entries, because their results are flagged invalid. Larger feature maps are
run as several tiles of columns, since the activation buffer holds 16384
words.

## Default sizes and what they buy

| parameter | default | where it comes from |
|---|---|---|
| BLK_OUT_S / F / 8 | 65 / 30 / 5 | the paper's 65:30:5 SPoT : fixed : 8-bit ratio, read as PE rows |
| BLK_IN | 16 | this design's choice |
| ACT_W, SPoT code, fixed codes | 4, 4, 4 and 8 bits | the paper (4/4 quantization, 5 % in 8 bits) |
| ACC_W | 32 | this design's choice |
| WBUF_DEPTH | 2048 words per core | this design's choice: holds the largest ResNet-18 / MobileNet-v2 layer |
| ABUF_DEPTH | 16384 words | this design's choice |
| RMAP_DEPTH | 128 passes | this design's choice |

**Throughput.** 100 rows × 16 lanes = 1600 multiply-accumulates per clock.
At the paper's 100 MHz, that is 320 GOPS, close to the 325 GOPS the paper
reports for ResNet-18 on an XC7Z045. ResNet-18 needs about 1.8 G MAC per image,
which at full use comes to ≈ 11.4 ms (the paper reports 11.2 ms). The paper's
own per-device array sizes are not available in its text. The 65/30/5 × 16
shape is therefore a reconstruction that matches the reported throughput, not
a copied figure.

**Resources.** The array needs 1040 SPoT lanes in LUTs and 560 multipliers.
The buffers need ≈ 14.8 Mbit (SPoT 8.5, fixed 3.9, 8-bit 1.3, activations 1.0).
That fits an XC7Z045 (900 DSPs, 19.2 Mbit of block RAM). The paper also runs
on the smaller XC7Z020 with unstated parameters, which needs smaller
BLK_OUT / BLK_IN / depths.

**Networks.** The paper evaluates ResNet-18 and MobileNet-v2 (ImageNet,
CIFAR-10/100). Every weight layer of both fits the default buffers:
* The largest ResNet-18 layer (3×3, 512→512, K = 4608) splits into
  332/154/26 rows. That is 6 passes in every core, or 6 × 288 = 1728 words per
  weight buffer.
* MobileNet-v2's widest layer has 1280 rows, which is 13 passes.
* Large feature maps are processed in column tiles.
* Run through the RTL, the conv5_x layer above takes 84 672 cycles
  (0.85 ms at 100 MHz). The ideal is 512·4608·49 / 1600 = 72 253 cycles. The
  gap is the last, partly filled pass: 332 SPoT rows occupy 6 passes of 65.
* MobileNet-v2's depthwise convolutions have one row per channel. They run,
  but they occupy a single PE row and 9 of its 16 lanes. The paper does not
  say how it handles them.

**Other splits.** The paper's ablation study compares several other splits.
Any of them runs on this array by setting the three row counts; a core given
zero rows simply idles. On the ResNet-18 fc layer (1000×512, one column),
simulated cycle counts are:

| split (SPoT : 4-bit : 8-bit) | cycles |
|---|---|
| 65 : 30 : 5 | 320 |
| 67 : 33 : 0 | 352 |
| 95 : 0 : 5 | 480 |
| 90 : 0 : 10 | 640 |
| 0 : 95 : 5 | 1024 |
| 0 : 100 : 0 | 1088 |

Only the split that matches the PE ratio keeps every core busy. The paper
sizes the cores separately for each configuration, so its latencies are not
directly comparable. Pure power-of-two (PoT) weights, a baseline in the paper,
are not supported: their 4-bit levels reach 2^6, beyond the reach of a 4-bit
SPoT code.

## What this RTL does not contain, and where it departs from the paper

* **Scaling and re-quantization.** Each row's scale α and the 4-bit
  re-quantization of outputs for the next layer are missing. The paper gives
  them only as training-time formulas. Results are raw integer dot products;
  a downstream stage must multiply by the row's α (which differs between SPoT
  and fixed rows) and re-quantize.
* **Host and memory.** The host processor, DRAM, DMA, and the tiling of whole
  networks into GEMM tiles are left out. The paper names only the Zynq devices.
* **Quantization-aware training.** Choosing which rows are SPoT, fixed or
  8-bit is done offline by the training flow (ADMM and STE in the paper).
  The hardware takes the result as row counts plus row maps.
* **This design's own choices.** The paper names the three cores, their ratio
  and their number formats, but gives no microarchitecture. The following are
  therefore this design's:
  * the lock-step schedule;
  * the buffer organisation and row maps;
  * the single-cycle adder trees;
  * the absence of back-pressure;
  * the asynchronous active-low reset of control state and accumulators
    (buffers are not reset).
* **No DSP packing.** The 4-bit fixed-point products are plain `*`
  operators. Packing two 4-bit products into one DSP is not done.
* **Open interpretations.** The SPoT sign polarity and exponent code follow
  the paper's encoding figure where its text disagrees (see above).

## Files

`rtl/`:
* `msp_pkg.sv`: types, SPoT constants, layer configuration struct.
* `spot_mult.sv`: SPoT shift-add product.
* `spot_pe.sv`, `fixed_pe.sv`: one PE row (16 lanes + adder tree + accumulator).
* `gemm_core.sv`: BLK_OUT PE rows of one scheme, weight buffer and row map.
* `act_buffer.sv`: the shared activation buffer.
* `msp_controller.sv`: the lock-step scheduler and counters.
* `msp_accel.sv`: the top.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each
works out its expected values independently of the RTL and prints
`TB_RESULT checks=N failures=M`:

* `tb_spot_mult`: every activation and code, 4-bit and 6-bit formats.
* `tb_spot_pe`, `tb_fixed_pe`: random dot products and the valid timing.
* `tb_gemm_core`: all three schemes, a permuted 12-row layer, idle cores,
  partial passes and result timing.
* `tb_act_buffer`: reads, and collisions between a read and a write.
* `tb_msp_controller`: every step's addresses and enables, the counters, and
  the latency from start to done.
* `tb_msp_workloads`: four real layer shapes at the default size, split
  65:30:5 with random row placement: ResNet-18 conv5_x (512×4608, 49 columns),
  ResNet-18 fc (1000×512), ResNet-18 conv1 (64×147, one 128-column tile) and
  MobileNet-v2's 1×1 320→1280 layer. It checks every result and that no core
  idles, and prints the cycle counts. It then runs five other row splits
  from the ablation study on the fc layer and checks their idle counts.
* `tb_msp_accel`: the whole accelerator at its default size, running three
  random layers (unbalanced, 65:30:5-balanced, one full pass). It checks every
  result against a reference GEMM, and checks that idle cores, balanced runs,
  partial passes, negative and zero-term SPoT codes, wide 8-bit weights and row
  remapping each occur.

To simulate with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/msp_pkg.sv tb/tb_msp_accel.sv \
          --top-module tb_msp_accel -Mdir obj_tb && ./obj_tb/Vtb_msp_accel
```

Replace `tb_msp_accel` with any other testbench name. Verilator finds the
modules a testbench uses in `rtl/` by their file names. The full-size top
testbench builds in about 20 seconds and runs in well under a second.
