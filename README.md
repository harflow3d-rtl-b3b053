# A runtime-reconfigurable streaming accelerator for 3D CNNs

This is SystemVerilog RTL for an FPGA accelerator that runs 3D convolutional neural networks
(C3D, Slowonly, R(2+1)D, X3D and similar human-action-recognition models) on video clips. It
follows the architecture of HARFLOW3D (Toupas et al.).

The main idea is a small set of hardware *nodes*, one per layer type, whose layer shape is set
at run time rather than at synthesis:
- convolution, fully connected, pooling, global average pooling, activation and element-wise
  nodes are built once;
- a host processor then executes the network layer by layer. For each layer it writes the
  layer's kernel, stride, padding and feature-map size into a node and streams the data
  through.

A layer smaller than a node's compile-time maximum therefore costs only its own work, with no
padded redundant work. Layers larger than the maximum are run in tiles.

Nodes sit between two stream crossbars (a "sandwich"). DMAs and the crossbars move the data.
A loop-back path from the output crossbar to the input crossbar lets one node's output feed
another node directly. A convolution and its activation, for example, run as one pass without
a round trip through memory.

```
            AXI-Lite (host)                              AXI4 (memory controller)
                 |                                    rd0      rd1            wr
          +------v------+                         +---v---+ +---v---+     +---^---+
          |  ctrl_regs  |--start/params--> all    |dma_rd | |dma_rd |     |dma_wr |
          +-------------+                         +---+---+ +---+---+     +---^---+
                                                      |         |             |
                         +----------------------------v---------v---+         |
            loop-back -->|   input crossbar  (3 sources, 11 dests)  |         |
            FIFO         +--+----+----+----+----+----+----+----+----+         |
              ^             |    |    |    |    |    |    |    |              |
              |           CONV(in,wt,ps) FC(in,wt,ps) POOL GAP ACT ELTW(a,b)  |
              |             |         |       |    |    |    |                |
              |          +--v---------v-------v----v----v----v--+             |
              +----------|   output crossbar (6 sources, 2 dests) |-------------+
                         +----------------------------------------+
```

All data paths are valid/ready streams. A stream beat carries `LANES` 16-bit words. Every node
in an instance uses the same `LANES`, which is the paper's c_in = c_out = c.

## Data format

- **Words.** Feature-maps, weights and partial sums are 16-bit signed fixed point with 8
  fraction bits (Q8.8).
- **Products.** Products are accumulated in 40 bits. Results are shifted back by 8 bits, with
  truncation, and saturated to 16 bits.
- **Feature-map order.** A feature-map is stored and streamed in H, W, D, C order, with the
  channel changing fastest. H is height, W width, D the temporal depth (frames) and C the
  channels.
- **Channel words.** One beat holds `LANES` consecutive channels, so a pixel is
  `CW = C / LANES` beats. C must be a multiple of `LANES`.
- **Memory.** Memory is addressed in bytes; one word is 2 bytes at `LANES = 1`.

## The convolution node

The convolution node is the largest and least obvious part. It is made of `conv3d` =
`conv_param_ctrl` + `sliding_window` + `conv_core`:

```
in stream -> fm_pad -> row/column/depth buffers -> window register -> kernel crossbar -> LANES x vector_dot -> accumulator -> round, + psum, saturate -> out
                                                      ^                    ^
                         parameter controller: latched shape, window, n_win, folds, map table
```

### Sliding window

`fm_pad` walks the padded coordinates. At a border it emits the pad value without consuming
input; elsewhere it forwards the input.

The window generator is a cascade of three circular buffers. Their sizes match the usual BRAM
model for this structure:

| buffer | entries                        | word width                 | holds                                       |
|--------|--------------------------------|----------------------------|---------------------------------------------|
| row    | `W_MAX * D_MAX * CW_MAX`       | `(KH-1) * LANES` words     | the previous KH-1 rows                      |
| column | `D_MAX * CW_MAX`               | `KH * (KW-1) * LANES` words | the previous KW-1 columns of the KH rows   |
| depth  | `CW_MAX`                       | `KH * KW * (KD-1) * LANES` words | the previous KD-1 frames of the KH x KW pixels |

`W_MAX` and `D_MAX` are the padded width and depth.

Each buffer is addressed modulo the *runtime* size (padded W x padded D x CW, and so on), so a
smaller layer uses a shorter effective line. This is the configurable line-buffer depth of the
design.

A window is emitted for each position whose stride phase counters are zero and that lies past
the first K-1 positions on every axis. Windows come out in output order: Hout, Wout, Dout, and
then channel word.

The window register is `[KD][KW][KH][LANES]`:
- it is compiled for the maximum kernel;
- index `[s][q][r]` is the pixel s frames, q columns and r rows before the newest;
- elements outside the runtime kernel are never read.

### Kernel crossbar, folding and bypass

The node has `LANES` vector-dot units, each with `LANES * FINE` multipliers:
- the DSP count is `c_in * c_out * f`;
- `FINE` is the paper's fine-grain folding factor f.

A runtime kernel of `|K| = kd*kh*kw` elements takes `folds = ceil(|K| / FINE)` cycles per
window and filter group.

The parameter controller fills a map table in `|K|` cycles. Entry e is the window-register
position of kernel element e, counted in (kh, kw, kd) order. In fold j, the kernel crossbar
gives multiplier i element `j*FINE + i`; multipliers past `|K|` get zero, which bypasses them.
For example, a 3x1x1 temporal kernel on a 5x7x7 node uses 3 of the 35 multipliers in one fold.

### Accumulation and output

One beat of the window (one channel word) is broadcast to all `LANES` vector-dot units. Each
unit handles one output channel of a filter group.

The accumulator buffer is indexed by filter group. It sums over the folds and over the CW
channel words of the pixel.

After the last channel word, each group's `LANES` sums leave as one output word:
- each sum is shifted back to Q8.8;
- if enabled, one word from the partial-sum stream is added;
- the result is saturated.

The partial-sum input serves two uses:
- continuing a convolution whose input channels were split into tiles;
- adding a residual branch or a bias.

Run time is `n_win * CW * FG * folds` cycles plus stalls, where `FG = F / LANES`. This is the
paper's `|S_out| * F * |K| / (c_in c_out f)`, and the testbench checks it.

- **Depth-wise mode.** The unit for output lane o uses only input lane o, FG is 1, and every
  window gives one output word.
- **Point-wise and fully connected.** These are the same datapath with a 1-element kernel.
  `fc` is a `conv_core` with one multiplier per lane pair and no sliding window.

### Weights

`go` starts a load phase that reads `CW * FG * folds * LANES * FINE` beats from the weight
stream into on-chip memory. The run starts only after that. Beat order is:
- channel word;
- filter group;
- fold;
- output lane o;
- multiplier i.

Each beat holds the `LANES` input-lane weights of filter `g*LANES+o`, element `j*FINE+i`, with
zeros past the kernel. Kernel element e corresponds to depth `e mod kd`, column
`(e / kd) mod kw` and row `e / (kd*kw)`. In depth-wise mode, only lane o of each beat is used.

## Other nodes

| node      | what it does | runtime parameters |
|-----------|--------------|--------------------|
| `pool3d`  | max or average over a 3D window, on the same sliding-window and padding hardware. Max pads with -32768. Average divides by the full kernel volume and truncates. | shape, kernel, stride, padding, type |
| `gap`     | global average pooling: sums every channel over all pixels, then divides by the pixel count while the last pixel streams | pixel count, channels |
| `act`     | ReLU, sigmoid or swish (x * sigmoid(x)). Sigmoid is piecewise linear with power-of-two slopes; its error is below 0.025. | word count, type |
| `eltwise` | add or multiply of two streams. In broadcast mode, a C-vector is loaded first and applied per channel to the whole map, as in squeeze-and-excitation. | word count, channels, type, broadcast |
| `fc`      | fully connected, on convolution hardware without the window buffer, with partial-sum input | C, F, psum |

## Control: registers, routes and a layer's life

`ctrl_regs` is an AXI-Lite slave. Register i is at byte address 4*i. The encodings are in
`rtl/harflow_pkg.sv`.

| idx | name | content |
|-----|------|---------|
| 0 | START | write: bit mask of units to start (bit 0 rd0, 1 rd1, 2 wr, 3 conv, 4 fc, 5 pool, 6 gap, 7 act, 8 eltw) |
| 1 | STATUS | read: [15:0] done (sticky until that unit's next start), [31:16] busy |
| 2 | XBAR_IN | 2 bits per input-crossbar destination: 0 rd0, 1 rd1, 2 loop-back, 3 none. Destinations: 0 conv, 1 conv weights, 2 conv psum, 3 fc, 4 fc weights, 5 fc psum, 6 pool, 7 gap, 8 act, 9 eltw a, 10 eltw b |
| 3 | XBAR_OUT | 3 bits per output destination (0 write DMA, 1 loop-back): source 0 conv, 1 fc, 2 pool, 3 gap, 4 act, 5 eltw, 7 none |
| 4-9 | RD0/RD1/WR ADDR, LEN | byte address and word count of each DMA |
| 10-14 | CONV HW, DC, F, K, P | (h<<16\|w), (d<<16\|c), filters [15:0] + depth-wise bit 16 + psum bit 17, kernel/stride, padding |
| 15-19 | POOL HW, DC, K, P, T | the same encoding; T bit 0: 0 max, 1 average |
| 20-21 | FC CF, FLAG | (C<<16\|F), psum bit 0 |
| 22-23 | GAP N, C | pixel count, channels |
| 24-25 | ACT N, T | word count, type (0 ReLU, 1 sigmoid, 2 swish) |
| 26-27 | ELTW N, CT | word count, channels [15:0] + type bit 16 (0 add, 1 mul) + broadcast bit 17 |

Field layouts:
- K register: kd[3:0] kh[7:4] kw[11:8] jd[14:12] jh[17:15] jw[20:18], where j is the stride.
- P register: start/end padding for depth, height and width, 3 bits each, from bit 0 up.

Runtime parameters are double-buffered:
- a node copies its registers when it starts;
- the routes are copied into the crossbars on every START write.

So the host can write the next layer while the current one runs. A START that names no node can
re-route the DMAs of a node that is still running.

A convolution layer that needs the same read DMA for weights and data runs in two phases:
1. Set `XBAR_IN` to rd1 -> conv weights, then START rd1|conv. The node latches its parameters
   and begins loading.
2. Once rd1 is done, route rd0 -> conv and rd1 -> conv psum, then START rd0|rd1|wr. The
   convolution keeps running across the route change.

A fused layer routes, for example, conv -> loop-back -> act -> write DMA, and starts all of them
at once. `done_irq` brings the units' done pulses out for an interrupt controller.

## Parameters and sizes

The architecture paper prints no sizes for an instance: the toolflow picks them per model and
per FPGA. The defaults of `harflow3d_top` are therefore one reasonable instance:

| parameter | default | meaning |
|-----------|---------|---------|
| `LANES` | 1 | parallel words per stream beat (c_in = c_out = c) |
| `CONV_KD/KH/KW` | 5, 7, 7 | largest convolution kernel, covering 1x7x7 stems and 5x1x1 temporal kernels |
| `CONV_FINE` | 35 | multipliers per lane pair (f); 245 = 7 x 35, so a 5x7x7 kernel takes 7 folds |
| `CONV_W_MAX`, `CONV_D_MAX` | 32, 16 | largest padded width and depth per run |
| `CONV_CW_MAX`, `CONV_FG_MAX` | 64, 64 | largest channel words and filter groups per run |
| `POOL_K`, `POOL_W_MAX`, `POOL_D_MAX`, `POOL_CW_MAX` | 3, 64, 16, 64 | pooling limits |
| `FC_CW_MAX`, `FC_FG_MAX` | 512, 128 | fully connected limits |
| `GAP_CW_MAX`, `ELTW_CW_MAX` | 512, 512 | channel limits |
| `BURST` | 16 | AXI4 burst length of the DMAs |

Layers beyond these limits run as tiles:
- input channels through partial sums;
- filters, width and depth as separate runs, with one DMA descriptor per contiguous segment.

The models above all fit this way; their kernels are at most 5x7x7 for convolution and 3x3x3
for pooling. With f = 35, point-wise layers use only 1 of the 35 multipliers. A real instance
would choose f, `LANES` and the limits for its model.

## Departures from the paper and limits

- **Runtime c and f.** The paper lists c_in, c_out and f among the runtime parameters. Here
  they are fixed at compile time. Only the kernel size is bypassed at run time; whole lanes
  are not.
- **Grouping.** Only groups = 1 (normal) and groups = C (depth-wise) are supported.
- **Weight buffering.** Weights are single-buffered and loaded before each run. The paper
  double-buffers them, which hides the load.
- **Read DMAs.** There are two read DMAs instead of the figure's single read/write pair. The
  second feeds weights, partial sums and the second element-wise operand.
- **Node count.** The toolflow would generate a model-specific set of nodes. This top has
  exactly one node of each type.
- **Own choices.** These are not described in the paper and are this design's: the Q8.8 split,
  the sigmoid approximation, the register map, the 4-deep loop-back FIFO, and the DMAs'
  contiguous transfers with one burst outstanding.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. The behaviour they check:

- **Streaming-node testbenches.** These drive random data with random input gaps and output
  back-pressure. They compare against loop-nest reference models in the testbench. Block
  tests use small compile-time sizes.
- **`tb_conv3d`.** Full 3x3x3 with padding, spatial 1x3x3 with stride 2, depth-wise 3x1x1 with
  partial sums, and point-wise. It also checks the cycle count against the compute bound.
- **`tb_harflow3d_top`.** Runs the top at its default parameters (about 9,300 cycles, under a
  minute of simulation). An AXI-Lite host model and a behavioural AXI memory
  (`tb/axi_mem_model.sv`) with random handshake delays drive a nine-layer network:
  - a 1x7x7 stem with fused swish;
  - a 3x3x3 convolution with fused ReLU;
  - max pooling;
  - a depth-wise temporal convolution with a residual partial sum;
  - average pooling;
  - global pooling;
  - a fully connected layer with bias and fused sigmoid;
  - a point-wise convolution fused with a broadcast multiply;
  - an element-wise add.

  Every output word is compared with a reference. Monitors count each mechanism, and one that
  never happens is a failure. The mechanisms are: stalls, loop-back beats, kernel bypass, mode
  switches of each node, partial sums, depth-wise, broadcast, each activation and pooling type,
  multi-burst DMA, re-routing during a layer, and parameter writes during a run.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/harflow_pkg.sv tb/tb_harflow3d_top.sv \
          --top-module tb_harflow3d_top -Mdir obj && obj/Vtb_harflow3d_top +verilator+rand+reset+2
```

(`-Wno-fatal` keeps width warnings of the testbenches from stopping the build.) Replace the testbench name to run any other test. The testbenches initialise or reset
everything they read, so two-state simulation with random initial values is safe.
