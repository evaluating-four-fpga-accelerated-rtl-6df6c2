# Floating-point inference cores for on-board space science networks

A spacecraft that has to decide on board, for example "is a solar energetic
particle event coming?" or "which plasma region is the probe in?", has to run
small neural networks on a radiation-tolerant SoC next to its processor.
AMD/Xilinx's DPU runs ordinary 2-D CNNs well, but in INT8 and with a fixed
set of operators. It cannot run four of the networks considered here:

* **multi-ESPERTA** is six logistic SEP forecasters. It needs a sigmoid and a
  greater-than comparison.
* **LogisticNet**, **ReducedNet** and **BaselineNet** classify MMS ion
  distributions. They need 3-D convolution and 3-D max pooling.

This RTL implements those four networks as separate accelerator cores. Each
core keeps the network in IEEE-754 binary32, so its outputs track a CPU
reference instead of an 8-bit approximation. Each core has the shape of a
processor-attached kernel:

* an AXI4-Lite control slave with start/done/idle/ready, auto-restart and
  a done interrupt;
* for the three MMS networks, an AXI4 read master (`m_axi_gmem`) into the
  DRAM it shares with the processor. Through this master the core reads its
  input tensor and any weights that do not fit on chip.

The datapath is deliberately plain. Every layer has its own sequential unit
built around one binary32 multiply-accumulator, and the layers run one
after another. This is the un-optimised, one-operation-at-a-time structure
of a naive high-level-synthesis mapping, and the throughput matches it.
There is no parallelism to tune. The point is numerical fidelity and
operator coverage.

`hls_accel_top` places the four cores side by side:

| index | core | control | DRAM master | interrupt |
|---|---|---|---|---|
| 0 | `multi_esperta_accel` | `s_axi_control[0]` | none | `interrupt[0]` |
| 1 | `logisticnet_accel` | `s_axi_control[1]` | `m_axi_gmem[0]` | `interrupt[1]` |
| 2 | `reducednet_accel` | `s_axi_control[2]` | `m_axi_gmem[1]` | `interrupt[2]` |
| 3 | `baselinenet_accel` | `s_axi_control[3]` | `m_axi_gmem[2]` | `interrupt[3]` |

The processor, DRAM, AXI interconnect, reset controller and DPU lie outside
the top. Their connections are the top's ports. In the system this design
follows, each core was a separate FPGA image, so putting all four in one
top is only a convenience.

## Numbers: binary32 everywhere

All arithmetic is in `fp32_pkg`. Its combinational functions are used by
every unit:

* `fp_add` and `fp_mul` are correctly rounded, round to nearest-even.
* `fp_gt` is an ordered compare.
* There are also `fp_relu`, int conversions and `fp_ldexp`.

Three simplifications keep the logic small:

* subnormals are flushed to zero;
* NaN is not distinguished from infinity;
* a zero result is +0.

The networks never produce subnormals at these magnitudes, so in practice the
outputs match an unfused binary32 CPU evaluation done in the same order.

`fp_mac` is the only arithmetic state element: `acc <= acc + a*b`. It uses
two roundings, as a C loop without FMA contraction would. `init` loads a
start value, which is the bias.

`fp_sigmoid` computes `1/(1+exp(-x))` in three pipeline stages:

1. Range reduction: `-x·log2 e = n + f`.
2. A degree-6 polynomial for `exp` on the reduced argument, scaled by `2^n`,
   then `1 + e`.
3. The reciprocal: an affine first guess on the significand, three Newton
   steps, then the exponent fix.

The result is within a few ulp. For |x| > 88 it saturates to 0 or 1.

## The layer engine

Every network layer is one of three units. All three share one interface:

* `start` / `done` pulses.
* Two read ports, `src_*` (activations) and `wgt_*` (parameters), each with
  the protocol *pulse `req` with `addr`, wait for `rvalid` with `rdata`*.
  Any latency is allowed, with one request outstanding per port.
* A write strobe `dst_we/dst_addr/dst_wdata`.

Because the latency is free, the same unit can read a local RAM (`sdp_ram`,
one cycle) or DRAM through the AXI master (tens of cycles). This is how
BaselineNet's first Gemm gets its weights from DRAM without its own code
path.

| unit | function | loop order | cost |
|---|---|---|---|
| `conv3d_unit` | ONNX Conv, no padding, any stride, optional ReLU | co, od, oh, ow, ci, kd, kh, kw | bias read + 3 cycles per tap with 1-cycle memories |
| `maxpool3d_unit` | 3-D max pool, window = stride | c, od, oh, ow, then the window | 2 cycles per input read |
| `gemm_unit` | `y = C + B·x`, B stored N_OUT×N_IN row-major, optional ReLU | o, i | 3 cycles per tap |

Tensors use the ONNX/PyTorch layouts flattened row-major. The parameters of
a layer sit at `W_BASE` (weights) and `B_BASE` (bias) of whatever memory the
`wgt` port reaches. When `RELU=1`, a negative result is written as +0, so
the network's ReLU costs no pass of its own.

## The three MMS networks

Input: one ion distribution function, 32×16×32 binary32 values in DRAM.
Output: four logits, one per dayside plasma region (solar wind, ion
foreshock, magnetosheath, magnetosphere). Software takes the argmax.

| network | layers (shapes) | parameters | operations |
|---|---|---|---|
| LogisticNet | MaxPool → 1×16×8×16 → Gemm 4×2048 | 8,196 | 30,720 |
| ReducedNet | Conv 1→1 k5×3×5 s(2,1,2) → 14³ → MaxPool → 7³ → Gemm 128×343 → ReLU → Gemm 4×128 | 44,624 | 502,961 |
| BaselineNet | Conv 1→32 k5×3×5 s(2,1,2) → 32×14³ → Conv 32→32 k3×3×3 → 32×12³ → MaxPool → 32×6³ → Gemm 128×6912 → ReLU → Gemm 4×128 | 915,492 | 110,541,696 |

The kernel and matrix shapes are the networks' own. The source network
diagrams do not give strides, padding or the pooling window; these were
inferred:

* first convolution: stride (2,1,2), no padding;
* second convolution: stride 1;
* pooling: 2×2×2 with stride 2.

These are the only choices that give the printed Gemm widths (343, 2048,
6912). Check them by counting 2 operations per multiply-accumulate, 7
comparisons per 2×2×2 window and 1 per ReLU: the parameter and operation
columns above then come out exactly as published for these networks.

### Where the parameters live

Trained weights are not published, so they cannot be compile-time ROMs.
Each core has an on-chip weight RAM instead. When a run starts with
`arg4[0] = 1`, the core first copies a parameter buffer from DRAM into this
RAM. The buffer must be in ONNX initialiser order: each layer's W, then its
B. Later runs with `arg4[0] = 0` reuse the RAM.

* **LogisticNet** keeps all 8,196 parameters on chip.
* **ReducedNet** keeps all 44,624 parameters on chip.
* **BaselineNet** cannot keep them all. Its 128×6912 Gemm weights plus bias
  (884,864 words) stay in DRAM. `gemm_unit` reads them one word at a time
  through the AXI master on every inference. The two convolutions and the
  last Gemm (30,628 words) are loaded on chip. During the load the core
  skips the DRAM gap, so the buffer can be the plain ONNX order. Which layer
  goes to DRAM is this design's choice; the source says only that "weights
  that did not fit" were placed there.

Activations between layers use one on-chip buffer per layer output:

* LogisticNet: 2,048 words;
* ReducedNet: 2,744 + 343 + 128 words;
* BaselineNet: 87,808 + 55,296 + 6,912 + 128 words.

The input is never copied. The first layer reads it word by word from DRAM,
once per tap that uses it. For BaselineNet that means 75 DRAM reads per
first-layer output. This is slow but needs no input buffer.

### Sequencing

Each MMS core has one small state machine:

1. `IDLE`
2. optional `LOAD_REQ`/`LOAD_WAIT`, one AXI read and one RAM write per
   parameter
3. `RUN`, which pulses each layer unit's `start` in turn and waits for its
   `done`
4. `DONE`

`ap_done` is high in `DONE` for exactly one cycle. The AXI master is shared
by the load logic, the first layer's `src` port and, in BaselineNet, the
first Gemm's `wgt` port. Only one of these is active at a time.

## multi-ESPERTA

There are six models. Each one computes

`y_m = sigmoid(C_m + B_m · x) > T_m`

on the same three flare features. The core has one `fp_mac` and one
`fp_sigmoid`:

* for each model, load `C_m`, then do three multiply-accumulates, then
  sigmoid, then compare;
* the six models run one after another;
* start to done takes 6·8 + 1 = 49 cycles.

The six decisions are returned as bits 5:0 of `res0`.

All numbers are AXI-Lite argument registers:

* `x[k]` at arg k;
* model m's `B0..B2, C, T` at arg `3 + 5m + 0..4`.

`C` and `T` reset to the published values:

* C = −6.07, −7.44, −5.02, −6.07, −7.44, −5.02
* T = 0.28, 0.28, 0.23, 0.35, 0.28, 0.23

The trained weights B are not published, so they reset to 0 and must be
written before use. Together that is 24 network parameters plus six
thresholds.

## Control interface (every core)

`axil_ctrl` is the block-level control slave. Its address space is 12 bits.

| offset | register |
|---|---|
| 0x000 | CTRL: bit0 start (write 1; cleared by ready unless auto-restart), bit1 done (cleared on read), bit2 idle, bit3 ready, bit7 auto-restart |
| 0x004 | GIE: global interrupt enable |
| 0x008 | IER: bit0 done, bit1 ready |
| 0x00C | ISR: write 1 to toggle |
| 0x100 + 4i | argument i (read/write) |
| 0x200 + 4j | result j (read only) |

MMS core arguments:

* arg0/arg1: input byte address, low and high 32 bits;
* arg2/arg3: parameter buffer address, low and high;
* arg4 bit 0: load the parameters.

Results res0..res3 are the logits.

A driver does this:

1. Write the arguments.
2. Write CTRL = 1.
3. Poll CTRL bit 1, or wait for the interrupt (then clear ISR).
4. Read the results.

All state elements reset asynchronously on `ap_rst_n` low, except the
RAM arrays. The AXI valid outputs are decoded from state, so reset must be
asserted from power-up, before the first clock, as a reset controller does.
A simulation that starts with reset already low and no falling edge leaves
the state undefined until the first clock. In a testbench, drop reset just
after time 0.

`axi_rd_master` issues single-beat reads (ARLEN 0, 4 bytes, INCR). It holds
ARVALID until ARREADY and keeps one transaction outstanding. An error
response (`rresp != OKAY`) is passed up as `rerror`, and the core treats the
word as data. Assertions check the AXI hold rules in `axil_ctrl` and
`axi_rd_master`.

## Throughput

All cores are timed for 100 MHz. The table compares cycles per inference in
simulation against the published HLS frame rates. The simulated DRAM model
answers each read in a few cycles; real DRAM behind an interconnect is
slower, which hurts the cores that read DRAM per tap.

| core | simulated cycles / inference | at 100 MHz | published HLS figure |
|---|---|---|---|
| multi-ESPERTA | 49 (core only) | ≈2 M/s | 37,231 FPS (with software overhead) |
| LogisticNet | 149,259 | 670 /s | 646 FPS |
| ReducedNet | 1,896,756 | 53 /s | 30 FPS |
| BaselineNet | 207,609,843 (including the 30,628-word parameter load) | 0.48 /s | 0.21 FPS |

## Verification

Every unit has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
ends by printing `TB_RESULT checks=N failures=M`. The references are
computed independently in double precision. The MMS references (`tb_mms_pkg`)
evaluate the whole network from the flat ONNX-ordered parameter vector.
Logits must agree to 2·10⁻⁵ of the sum of the absolute products.

Behavioural models:

* `axi_mem_model`: DRAM with random AR/R latency;
* `rd_port_model`: a read port with random latency;
* `axil_host` and `mms_host`: a driver that follows the sequence above.

Top-level tests:

* `tb_hls_accel_top` runs all four cores at once with BaselineNet narrowed
  (4 channels, 16 hidden units). It checks every result. It also counts
  each mechanism and fails if one is never seen:
  * ESPERTA decisions both ways;
  * auto-restart;
  * parameter load;
  * Gemm1 weight streaming;
  * ReLU clamping;
  * a done interrupt from each core.
* `tb_hls_accel_top_full` is the same with every parameter at its default.
  It runs one full BaselineNet inference, so it takes minutes.

Example, with plain Verilator (package files first):

```
verilator --binary --timing --assert --top-module tb_hls_accel_top \
  rtl/fp32_pkg.sv rtl/axi_pkg.sv tb/tb_fp_pkg.sv tb/tb_mms_pkg.sv \
  rtl/fp_mac.sv rtl/fp_sigmoid.sv rtl/sdp_ram.sv rtl/axil_ctrl.sv \
  rtl/axi_rd_master.sv rtl/conv3d_unit.sv rtl/maxpool3d_unit.sv \
  rtl/gemm_unit.sv rtl/multi_esperta_accel.sv rtl/logisticnet_accel.sv \
  rtl/reducednet_accel.sv rtl/baselinenet_accel.sv rtl/hls_accel_top.sv \
  tb/axil_host.sv tb/axi_mem_model.sv tb/mms_host.sv tb/top_driver.sv \
  tb/tb_hls_accel_top.sv
./obj_dir/Vtb_hls_accel_top
```

To run a unit testbench, use the same command with only the files that unit
needs. Add `tb/rd_port_model.sv` for the layer units.

## Where this departs from the evaluated system

Several points are this design's own:

* The evaluated cores came out of high-level synthesis. These are
  hand-written equivalents of the same organisation.
* The parameter-load step.
* Which BaselineNet layer stays in DRAM.
* Single-beat AXI reads.
* Subnormal flushing.
* The sigmoid algorithm.
* Combining the cores in one top.

Two points differ from how the evaluated system is described:

* **Layer overlap.** That system's HLS cores are described as a streaming
  (dataflow) organisation, with each layer mapped onto its own fabric. Here
  each layer also has its own unit, but a layer starts only when the
  previous one has finished. Consecutive layers, and consecutive
  inferences, never overlap.
* **The multi-ESPERTA branches.** Multi-ESPERTA is described as the six
  models combined in parallel into one network. Here that network is
  evaluated on one multiply-accumulator and one sigmoid, one model after
  another. The decisions are the same; only the latency (49 cycles)
  reflects the sharing.

The evaluated system matched CPU outputs to 1e-10. That is a statement about
an fp32 flow. Here the order of accumulation is the plain loop order. A CPU
run with a different summation order or fused multiply-add will differ in
the last bits.

The DPU-based networks (a VAE encoder and CNetPlusScalar) are not part of
this RTL. They run on the vendor DPU, which is not reproduced here.
