# A parameterizable 8-bit convolution accelerator

This accelerator runs the convolution layers of a CNN one layer at a time. It is meant for a small
SoC FPGA, where a host processor streams data to it from DRAM. Each run computes

    OACT = MPOOL( ReLU( CONV(IACT, W) + B ) )

on 8-bit dynamic fixed-point (DFP) data. ReLU and max-pooling are optional per layer. The supported
layer shapes are those of compact CNNs such as SqueezeNet, ZynqNet and PeleeNet, and also VGG-16:

| kind | filter | padding | stride |
|---|---|---|---|
| point-wise | 1x1 | 0 | 1 |
| spatial | 3x3 | 0 or 1 | 1 or 2 |

Max-pooling, when enabled, is 2x2 or 3x3 with stride 2.

The core idea is to keep data in on-chip memories (OCMs) and overlap the stages. The weights of a
layer are loaded once. The input feature map then passes through exactly once, row by row. Each
output pixel is computed from a window copied into one of two ping-pong window memories, so
copying the next window overlaps computing the current one. The size of every parallel unit and
every memory is a parameter. The same RTL therefore spans small and large devices.

The RTL follows the architecture of Mousouliotis and Keramidas, "A Parameterizable Convolution Accelerator for
Embedded Deep Learning Applications", which was built with HLS. That publication gives the block
structure, the parameters, the data layouts and the layer types. It does not give the
cycle-level control, the handshakes, the bit widths, the DFP arithmetic or the memory sizes. Those
parts are this design's own, and are marked as such below and in each file header.

## Block structure

```
           PARAMS ──► param_buf (Weights OCM: OCP banks, Biases OCM)
                              │ w_data (OCP x ICP bytes)
                              ▼
IACT ──► window_fetch ──► window_buf ──► pe_array ──► postproc ──► out_pixel_buf
         (iact_row_buf)   (2 Window       (OCP PEs,   (OACT-PIXEL,  (2 OUT-PIXEL
                           OCMs)           ICP MACs    bias, scale,  OCMs)
                              ▲            each)       round, sat,     │
                              └── conv_compute ──┘      ReLU)          ▼
                                                                  stream_fifo
                                                                       │
                                      OACT ◄── bypass MUX ◄── pool_stage (rows)
                                                          ◄── pool_stage (pixels)
                                                               = mpool_part
```

- `conv_accel` is the top. It contains `conv_part` (the CONV-PART), `stream_fifo` and `mpool_part`
  (the MPOOL-PART).
- `accel_pkg` holds the layer descriptor `layer_cfg_t` and the output-size functions.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `ICP` | 32 | input-channel parallelism: multipliers per PE, and bytes per window word |
| `OCP` | 16 | output-channel parallelism: number of PEs (must be even) |
| `APACK` | 16 | activations per stream beat; also the channel parallelism of the MPOOL-PART |
| `PPACK` | 16 | parameters per PARAMS beat |
| `PE_DSP` | 16 | PEs built from DSP-packed multipliers; the rest use LUT multipliers |
| `FILTER_MAX` | 3 | rows in IACT-ROW, i.e. largest filter |
| `WINxCHIN_PAD_MAX` | 16384 | bytes per IACT-ROW row (X_i * C_i) |
| `FILTERxFILTERxCHIN_MAX` | 4608 | bytes per Window OCM (F*F*C_i) |
| `CHOUTxFILTERxFILTERxCHIN_MAX` | 524288 | bytes of the Weights OCM |
| `CHOUT_MAX` | 1024 | largest C_o: sizes the biases, OACT-PIXEL and OUT-PIXEL |
| `PWINxPCH_MAX` | 16384 | bytes of the row-pool result buffer (W_o * C_o) |
| `PCH_MAX` | 512 | bytes of the pixel-pool result buffer (C_o) |
| `FIFO_DEPTH` | 16 | beats of the CONV-PART → MPOOL-PART FIFO |

`ICP`, `OCP` and `APACK`/`PPACK` take the values of the published reference configuration, which
ran at 300 MHz on an XCZU3EG. Its DSP count fits the packing used here: 32 × 16 / 2 = 256 DSPs
for the PEs. The other published configurations use ICP 16/32, OCP 8/16 and PACK 8/16. They are
reached by overriding these parameters, with `PE_DSP = OCP`.

The memory sizes are not published. They were chosen so that the largest layers of
SqueezeNet v1.1, PeleeNet, ZynqNet and VGG-16 fit:

- The widest IACT row is VGG-16 conv1_2, 224 × 64 = 14336 bytes.
- The biggest window is 3 × 3 × 512 = 4608 bytes.
- The largest weight sets are:
  - SqueezeNet conv10: 512 × 1008 = 516096 bytes.
  - PeleeNet 704 → 704: 495616 bytes.

The clock frequency is not an RTL parameter.

Some layers have more weights than the Weights OCM holds, such as VGG-16's 512 → 512 3x3 layers.
The host splits them over output channels into several runs and streams the input again for each
run. For example, five runs of at most 112 channels each: 112 × 4608 ≤ 524288.

Constraints on the layer:

- C_i must be a multiple of `ICP`.
- C_o must be a multiple of `OCP`, `APACK` and `PPACK`.
- `ICP` must be a multiple of `APACK` and `PPACK`.

The host zero-pads channels to meet them. For example, an RGB first layer is padded to 32 input
channels, and SqueezeNet's 1000 classes to 1008.

## Interface and stream formats

`conv_accel` ports:

| port | meaning |
|---|---|
| `clk`, `rst_n` | clock; asynchronous active-low reset (clears control state, not memories) |
| `start`, `cfg` | one-cycle start; `cfg` is the `layer_cfg_t` of the layer |
| `busy`, `done` | busy from start to the end of the layer; `done` pulses once |
| `s_par_valid/ready/data` | PARAMS, `PPACK` bytes per beat |
| `s_iact_valid/ready/data` | IACT, `APACK` bytes per beat |
| `m_oact_valid/ready/data`, `m_oact_last` | OACT, `APACK` bytes per beat; `last` on the layer's final beat |

All streams use valid/ready handshakes with AXI-Stream meaning. Byte *i* of a beat is bits
`8i+7:8i`. A `start` while `busy` is ignored.

`layer_cfg_t` fields:

- `in_h`, `in_w`, `in_c`, `out_c`
- `fsize` (1 or 3), `stride` (1 or 2), `pad` (0 or 1)
- `relu_en`
- `pool_en`, `pool_k` (2 or 3)
- `bias_shift`, `out_shift`

Stream orders, each with the channel index changing fastest:

- **IACT**: `[H_i, X_i, C_i]`, each value once, without padding.
- **PARAMS**: first the C_o biases, then the weights in `[C_o, F_h, F_w, C_i]` order.
  Biases-first is this design's choice. Both streams may be driven at the same time. The PEs
  start only after the last weight has arrived.
- **OACT**: `[H, W, C_o]` order, after pooling if it is enabled.

The layer ends, with `busy` falling and `done` pulsing, when two things have happened:

- the last OACT beat has been accepted;
- the MPOOL-PART has taken every beat the CONV-PART produced.

The second condition matters because floor-mode pooling drops trailing rows and columns. Their
beats arrive after the last OACT beat and must still be drained.

## CONV-PART in detail

### Weights and biases (`param_buf`)

The Weights OCM is split into `OCP` banks, so all PEs read their weights in the same cycle.
Output channel `co` lives in bank `co % OCP`. Let `K = F·F·C_i / ICP` be the number of
`ICP`-byte words in one filter. Then channel group `g = co / OCP` occupies words `g·K … g·K+K-1`
of its bank. Word `k` holds input channels `(k mod C_i/ICP)·ICP …` of filter tap
`k / (C_i/ICP)`.

The loader walks the PARAMS stream in these nested orders, outermost first:

- group
- bank
- word
- `PPACK`-byte part of the word

That walk turns the `[C_o, F_h, F_w, C_i]` order into the banked layout without buffering.
Biases go to a separate array that is read one value at a time.

### Input rows and windows (`window_fetch`, `iact_row_buf`, `window_buf`)

IACT-ROW holds `FILTER_MAX` input rows in a ring, with row *r* in slot `r mod FILTER_MAX`. Rows
are stored unpadded, one `ICP`-byte word per `ICP` channels of a pixel. Each IACT beat fills one
`APACK`-byte part of a word.

For each output row, `window_fetch` does three things:

1. It loads every input row that the output row needs and that is not yet in the ring.
2. For each output pixel, it waits for a free Window OCM and copies the F × F × C_i window into it,
   one word per cycle. Taps that fall in the padding are written as zero words.
3. It commits the window.

At the end it reads and discards any input rows no window used. An example is the last row of an
even-height map with stride 2 and padding 0. Discarding them lets the host always send the whole
map.

There are two Window OCMs (`window_buf`). Full flags decide which OCM the writer fills and which
one the PEs read. Copying window *n+1* therefore overlaps computing window *n*.

### PEs and DSP packing (`pe_array`, `pe_pair`, `mul2_packed`)

All `OCP` PEs see the same window word. Each PE multiplies it byte-wise by `ICP` weights from its
own bank, sums the products in a balanced adder tree (`adder_tree`) and accumulates into a 32-bit
register. The pattern is one word per cycle, with `first` loading rather than adding.

PEs come in pairs. The two PEs of a pair share the activation operand. So one wide multiplier can
produce both products:

    (w0 · 2^18 + w1) · a  =  (w0·a) · 2^18 + w1·a

The low 18 bits are `w1·a`, as a signed 18-bit field. The high part is `w0·a`, after the low
field's sign borrow is subtracted: `hi = (prod − lo) >>> 18`. The product is 27 × 8 bits, which
fits a 27 × 18 DSP multiplier. The multiplier is marked `use_dsp = "yes"`.

The first `PE_DSP` PEs, rounded down to whole pairs, use this packed multiplier. The others use
plain multipliers marked `use_dsp = "no"`, so they are built from LUTs. The paper names this
DSP/LUT split and the two-products-per-DSP trick. The 18-bit offset and the borrow correction are
this design's.

### Sequencing and timing (`conv_compute`)

For each full Window OCM, `conv_compute` runs the PE array once per channel group:
`G = C_o / OCP` passes of `K` MAC cycles each. It hands the accumulators to post-processing after
each pass, taking one cycle per hand-over. Then it releases the window.

With no stalls, one output pixel takes

    1 + G · (K + 1)  cycles

for example, 1 + 4 · (18 + 1) = 77 cycles for a 3x3, C_i = 64, C_o = 64 layer at the defaults.
The rate holds when post-processing keeps up, which needs `K + 1 ≥ OCP`. Otherwise the hand-over
waits. A stall can come from three places:

- the window copy (F·F·C_i/ICP cycles per pixel);
- the output stream;
- the MPOOL-PART.

Any of these stretches the time. The unit testbench checks this cycle count exactly. The
end-to-end tests check that no layer finishes faster than its MAC cycles allow.

### Post-processing (`postproc`, `out_pixel_buf`)

The `OCP` accumulators of a pass are latched into the OACT-PIXEL registers. This frees the PEs at
once. Then, one value per cycle:

    v = acc + (bias << bias_shift)                 bias aligned to the accumulator
    v = (v + 2^(out_shift-1)) >>> out_shift        rescale, round half up (no rounding if out_shift = 0)
    v = clamp(v, −128, 127)                        over/underflow
    v = relu_en ? max(v, 0) : v

The stage order (bias, rescale, round, saturate) is the published one. The exact formulas, and
the use of two per-layer shifts to carry the DFP exponents, are this design's choice.

Results go into one of two OUT-PIXEL OCMs, each holding the C_o values of one pixel. When a pixel
is complete, its OCM is read out as `C_o / APACK` beats while the other OCM fills.

## MPOOL-PART (`mpool_part`, `pool_stage`)

Max-pooling is separable, so it is done in two identical stages. Each stage is a `pool_stage`
that keeps running maxima in a result buffer:

- The **row stage** pools over K consecutive rows. Its buffer holds one pooled row,
  `W_o × C_o` values.
- The **pixel stage** pools over K consecutive pixels of the row-pooled stream. Its buffer holds
  `C_o` values.

Each stage works on `APACK` channels per beat. It counts units u = 0, 1, 2, … along its
dimension, where a unit is a row or a pixel. With stride 2 and `n_out = (n − K)/2 + 1`:

- unit *u* starts window *u/2* when *u* is even and `u/2 < n_out`. The stored maximum is then
  overwritten.
- unit *u* ends window `(u−K+1)/2` when `u ≥ K−1`, `u−K+1` is even, and the window exists. The
  maximum is then sent on instead of stored.
- units in no window are consumed and dropped.

For K = 3, unit 2 both ends window 0 and starts window 1. The comparison is signed, because
activations may be negative when ReLU is off.

Pooling uses floor mode. For the pooled layers of the CNNs above, odd sizes use 3x3 and even
sizes use 2x2, so floor and ceil agree. With `pool_en` low, the bypass multiplexer passes the
CONV-PART stream straight to OACT.

## Departures from the published design and open points

- **Control.** All control is written by hand and is not the HLS schedule. The published design
  is an HLS dataflow whose pipelining is left to the tool. Cycle counts will therefore differ from
  the published throughput numbers, and nothing here reproduces those numbers.
- **Window registers.** The "IACT registers" between the Window OCM and the multipliers are not a
  separate pipeline stage. The window word is read combinationally and multiplied and
  accumulated in the same cycle. This is the simplest correct form. A real 300 MHz build would
  register the read and pipeline the adder tree.
- **Memories.** Memories are plain arrays with combinational reads and clocked writes. A synthesis
  tool maps them to distributed RAM or needs read registers for block RAM. The published design
  relies on HLS array partitioning and BRAM.
- **Post-processing rate.** Post-processing handles one value per cycle. This follows the
  published figure, which draws the path from OACT-PIXEL through bias/rescale to OUT-PIXEL as
  single values. A channel group of `OCP`
  PEs therefore needs at least `OCP` cycles in that stage. When a layer has `K + 1 < OCP`, the PEs
  wait for it. Examples are 1x1 layers with C_i below 15·ICP: at C_i = 64, K = 2, a group takes
  16 cycles instead of 3. Deep 3x3 layers (K ≥ 15) run at the full rate of `K / (K+1)` MAC
  efficiency. For comparison, VGG-16 (15.47 G MACs) would take about 15.47e9 / (512 · 0.95) ≈
  32 M cycles, or 106 ms at 300 MHz, if IACT streaming keeps up. The published CONV time is
  126.5 ms. Compact CNNs dominated by narrow 1x1 layers would be markedly slower than published.
  A wider post-processing stage (several values per cycle) would remove this limit.
- **Separate current-row/pixel memories.** The published MPOOL-PART has separate "current" and
  "result" memories for rows and pixels. Here the arriving beat plays the role of the current
  row or pixel, and only the result memories exist.
- **IACT-ROW rows.** Rows of IACT-ROW hold the unpadded row (`X_i · C_i` bytes). Padding is added
  when windows are copied.
- **Not modelled.** The host processor, the cache-coherent high-performance ports, DMA and DRAM
  are not modelled. The top exposes the three streams and the layer descriptor in their place.
- **Host software.** The following are left to host software:
  - splitting large layers over C_o and merging the results;
  - reshaping the first layer;
  - channel padding;
  - fully connected layers.
- **Descriptor.** The format of the layer descriptor is this design's.
- **Tuned build.** A PeleeNet-tuned build with smaller OCMs was published, but its sizes were not.
  It is not reproduced.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares against values computed
independently in the testbench. Each prints `TB_RESULT checks=<n> failures=<n>`, and each has a
watchdog.

`tb_ref_pkg` holds a plain software model of a layer: convolution, post-processing and pooling.
The end-to-end testbenches share `tb_accel_body.svh`, which does the following:

- randomises data;
- drives the streams with random gaps;
- applies random back-pressure on OACT;
- compares every output value.

A layer that does not finish within a generous cycle limit fails the run at once.

It also counts each mechanism of the design and fails if one never occurs:

- 1x1 and 3x3 layers, and stride 2;
- zero-padding words in a window;
- 2x2 and 3x3 pooling, row-pool outputs, and bypass beats;
- saturation, and the ReLU clamp;
- a window copy overlapping the MACs;
- an OUT-PIXEL drain overlapping its refill;
- PEs waiting for post-processing;
- OACT back-pressure;
- a full stream FIFO;
- unused input rows dropped.

The end-to-end testbenches:

- `tb_conv_accel` runs six layers at reduced size: ICP 8, OCP 4 (one DSP pair and one LUT pair),
  4 bytes per beat, small OCMs.
- `tb_conv_accel_full` runs two layers through the top with every parameter at its default.
- `tb_conv_accel_workloads`, also at the defaults, runs layers with the real channel counts, filter,
  stride and pooling of the evaluated networks, on maps cropped to a few pixels:
  - a VGG-16 conv5 secondary convolution, 512 → 112, 3x3, which nearly fills the Weights OCM;
  - SqueezeNet conv10, 512 → 1008, 1x1;
  - the PeleeNet stem convolution;
  - a ZynqNet-style stride-2 layer;
  - a SqueezeNet fire expand layer with 3x3 pooling.

Simulation with Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/accel_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_conv_accel.sv \
        --top-module tb_conv_accel
    ./obj_dir/Vtb_conv_accel

Replace the last file and the top module to run another testbench. Unit testbenches of leaf
modules need only the package and the modules they instantiate, but passing all of `rtl/*.sv` is
harmless.

Verilator reports two kinds of warnings, both understood:

- **Unused layer-descriptor fields.** Each block takes the whole `layer_cfg_t` but reads only
  some of its fields.
- **Reset used synchronously and asynchronously.** `rst_n` resets the flops and also disables the
  handshake assertions.
