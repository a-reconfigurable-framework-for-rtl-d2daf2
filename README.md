# A tiled INT8 layer accelerator for agent-scheduled FPGA offload

This is the hardware half of a CPU + FPGA inference system. A software agent on
the host cuts a neural network into layers and tiles. It decides at run time
which layers go to the FPGA, and it streams their data in. This RTL is the
accelerator core that receives that work. It has one configurable dataflow
pipeline: 8-bit MAC lanes, a partial-sum buffer, and an activation and
requantisation stage. Kernel size, channel count, stride and mode are set
before each job, so one bitstream can run convolutions, fully connected layers
and max pooling. Tiles are double-buffered on chip. The host can therefore
stream the next tile while the current one is computed, which keeps the MAC
lanes busy.

The design follows the paper "A Reconfigurable Framework for AI-FPGA Agent
Integration and Acceleration" (Yunusoglu et al.). The paper describes the
accelerator at the level of its parts and what they do. It gives no
micro-architecture, widths, memory sizes or interface timing. Everything at
that level is a choice made here, and each such choice is marked below.

## Where the core sits

```
 host CPU: scheduling agent, driver          DRAM
        |  AXI4-Lite (job set-up)              |
        |            DMA (host side) ----------+
        v              |  AXI4-Stream in (64 b)      ^ AXI4-Stream out (64 b)
 +------------------------------------------------------------------+
 | accel_top                                                        |
 |  csr_axil --cfg,start--> accel_ctrl <--stream in (tdest)         |
 |                            |      \                             |
 |                 tile_buffer (fmaps) tile_buffer (weights)        |
 |                  2 banks x 4096 w   2 banks x 4096 w             |
 |                            \      /                             |
 |                          layer_engine                            |
 |        address generation -> mac_array (8 lanes) -> psum merge   |
 |                 (psum_buffer) -> act_quant (ReLU, shift, sat)    |
 |                 -> result queue (out_fifo, 8 words)              |
 |                               |                                  |
 |                            out_fifo ------------> stream out     |
 +------------------------------------------------------------------+
```

The paper's host-side parts are not part of this RTL:

- the agent: Q-learning with a target table and an epsilon-greedy choice of
  which layer to offload;
- the driver;
- the DMA engine;
- the DRAM.

They reach the core only through its three ports: a register file, an input
stream and an output stream. There is also an interrupt, `irq`.

## A job

One job computes one layer tile. The host does four things:

1. It writes the configuration registers.
2. It writes `CTRL = 1`. This captures the configuration as the *pending* job.
3. It streams the feature-map tile with `tdest = 0`, ending with `tlast`.
4. For a convolution, it also streams the weights with `tdest = 1`, ending with
   `tlast`.

Steps 2 to 4 may come in any order. The controller launches the job when three
things hold: the engine is idle, a feature-map bank is full, and (for a
convolution) a weight bank is full. Only one job can be pending at a time. The
host writes `CTRL` again only after `STATUS.start_pending` has cleared. It can
do so while the previous job is still running, because the engine keeps its own
copy of the configuration.

| address | register | fields |
|---------|----------|--------|
| 0x00 | CTRL (W) | bit 0: start |
| 0x04 | STATUS (R) | 0 busy, 1 start pending, 2 overflow, 3 feature-map bank full, 4 weight bank full, 31:16 jobs done |
| 0x08 | CH | `in_c` [11:0]: input channels in this tile |
| 0x0C | DIM | `in_h` [9:0], `in_w` [25:16]: tile size, padding included |
| 0x10 | KERN | `k_h` [3:0], `k_w` [11:8], `stride` [18:16] |
| 0x14 | GROUPS | `groups` [7:0]: output-channel groups of 8 |
| 0x18 | FLAGS | 0 mode (0 MAC, 1 max pool), 1 ReLU, 2 first_ci, 3 last_ci, 4 keep weights, 12:8 shift |
| 0x1C | JOBS | read: jobs done; write: clear the overflow flag |
| 0x20 | BUSYCYC | read: cycles the engine was busy; write: clear |
| 0x24 | STALLCYC | read: cycles the engine waited for room for its results; write: clear |

The two counters are 32 bits wide and stop at their maximum. They give the
scheduler measurements to decide from. Reading BUSYCYC before and after a
layer gives that layer's time on the core. STALLCYC shows how much of that
time the host was too slow to drain the output.

## Data layouts

This is the part a driver must get exactly right.

**Feature-map tile.** The values are 8-bit and stored height, width, channel:
element `(y, x, c)` is byte `(y*in_w + x)*in_c + c` of the tile. Eight bytes
make one 64-bit word, low byte first. The tile must already contain any
padding, because the engine never reads outside it. The output is
`oh × ow`, with `oh = (in_h - k_h)/stride + 1` and `ow = (in_w - k_w)/stride + 1`.

**Weights.** One 64-bit word holds the weights of eight output channels. These
eight channels form a *group*. Lane `l` (byte `l`) is output channel
`8g + l`. Word `((g*k_h + ky)*k_w + kx)*in_c + c` holds the weights for
kernel position `(ky, kx)` and input channel `c`. For layers whose output
channel count is not a multiple of 8, pad with zero weights.

**Outputs.** The core returns one 64-bit word per output pixel and group. The
word holds the eight 8-bit results of that group, lane `l` in byte `l`. Words
come out group by group, then row by row, then column by column. The job's
last word carries `tlast`.

**Fully connected layers** run as a convolution whose kernel is the whole
tile (`k_h = in_h`, `k_w = in_w`). That gives one output pixel per group.

**Max pooling** (mode 1) takes no weights. Each lane keeps the maximum of its
own channel, so a group is eight consecutive channels. Two rules apply:
`in_c` must be a multiple of 8, and `groups = in_c / 8`. Set `shift` to 0.

**Input channels over several tiles.** Sometimes a layer's channels do not fit
in one tile. The host then runs the same output tile several times, each run
with a slice of the channels:

- The first slice sets `first_ci`.
- The last slice sets `last_ci`.
- Middle slices clear both flags.

A job without `last_ci` stores its 32-bit sums in the partial-sum buffer and
outputs nothing. A job without `first_ci` adds the stored sums before it
stores or outputs. The buffer has one entry per (group, output pixel), so
`groups*oh*ow` must not exceed `PSUM_DEPTH` (1024).

**Requantisation.** A result is computed from the 32-bit sum `s` in three
steps:

1. If ReLU is enabled, `s` becomes `max(s, 0)`.
2. It is rounded half up and shifted: `(s + 2^(shift-1)) >>> shift`, or left
   alone when `shift = 0`.
3. It is saturated to the range −128…127.

The host picks `shift` per layer from its quantisation scales.

**Keeping weights.** A job with `keep weights` set leaves its weight bank in
place, so the next job uses the same weights without a new transfer. This is
how one layer's weights are reused over many spatial tiles.

## Double buffering and flow control

Each tile buffer has two banks. The input stream always writes the *fill*
bank, and `tlast` marks that bank full. Filling then moves to the other bank.
The engine always reads the *compute* bank. When a job completes, the
controller releases that bank, and the compute side moves on. This gives two
kinds of flow control:

- **Input back-pressure.** When both banks of a buffer are full, `tready`
  drops for words addressed to that buffer. It rises again when a job
  finishes.
- **Output stall.** When the receiver of the output stream is slow, the
  16-word output FIFO fills, and then the engine's 8-entry result queue. The
  engine then waits before it starts the next window (see Timing).

Banks are consumed in the order they were filled. The driver must therefore
send tiles in job order. A tile longer than a bank (4096 words) keeps its
first 4096 words. The extra words are dropped, and the sticky `overflow` flag
is set.

## Timing

The engine takes one window element per cycle. For a convolution this is one
input channel at one kernel position, multiplied in all 8 lanes at once (8
MACs per cycle). For pooling it is one kernel position across 8 channels.
With `W = k_h*k_w*in_c` for a convolution, or `k_h*k_w` for pooling, an output
pixel costs `W` cycles. The next window starts in the cycle after the last
element of the previous one. The finished sum drains behind it: memory and
MAC latency, the merge with the partial-sum buffer, and the requantiser.

Every flag a window needs later travels down the pipeline beside its data.
These are: first element, last element, partial-sum index, and last pixel of
the job. Results enter an 8-entry queue inside the engine, and the core's
16-word output FIFO sits behind it.

A window that will produce an output reserves a queue slot before its first
element is read. The slot is freed when the word leaves. When all 8 slots are
taken, the next window waits. These are the stall cycles the STALLCYC register
counts. Nothing already in the pipeline ever has to stop, so the memory read
path needs no stall logic.

A job adds 2 set-up cycles, 3 drain cycles (2 when it only stores partial
sums) and 1 completion cycle. The engine is therefore busy for
`6 + Σ W + stalls` cycles, or `5 + Σ W + stalls` for a job that only stores.
`done` is seen one cycle later. The engine testbench checks this
count for every job, and the core testbench checks it through BUSYCYC. A job's
last words can still be queued after `done`, while the next job already runs.

## What follows the paper and what does not

Taken from the paper:

- parallel MAC units on 8-bit quantised weights and activations, with 16-bit
  mentioned as an option (`DATA_W` is a parameter);
- a dataflow pipeline of MACs, activation sub-blocks and partial-sum buffers;
- run-time configuration of kernel size, channel counts and stride;
- support for convolution, pooling, activation and fully connected layers;
- on-chip tile buffers, with the next tile fetched while the current one is
  computed;
- a controller that feeds the pipeline and streams results back;
- AXI as the host interface of an FPGA SoC, with a 64-bit data path as in the
  paper's system figure.

Choices made here, where the paper says nothing:

- 8 lanes, which is one 64-bit word of 8-bit values;
- 32-bit accumulators;
- buffer depths of 4096 words per bank, 1024 partial-sum entries and 16 FIFO
  words;
- the register map, the `tdest` stream format and all data layouts;
- ReLU as the activation, max as the pooling, and a power-of-two shift with
  rounding as the requantiser;
- padding done by the host;
- one pending job at a time;
- the keep-weights option;
- the busy and stall cycle counters, as the feedback the paper lets the
  scheduler use;
- the one-element-per-cycle output-stationary schedule;
- the 8-entry result queue and its slot reservation.

Departures and open points:

- The paper speaks of a dedicated pipeline per layer. It also says a single
  design serves different layers without re-synthesis. This core has one
  pipeline that is reconfigured for each job.
- The paper evaluates on a PCIe accelerator card. This core has only AXI
  ports. A PCIe card would put the vendor's PCIe-to-AXI bridge and DMA in
  front of it.
- The paper also shows an LLM system with RoPE, RMSNorm, softmax, SiLU and
  4-bit quantisation units. Those units are only named there, and they are not
  built here.
- The paper's agent, a Q-learning scheduler, is host software. No hardware
  version is provided.
- `DATA_W = 16` and `LANES = 16` are simulated only through the workload
  bench (`cnn_workload_int16_tb`, `cnn_workload_lanes16_tb`). With 16-bit
  data the accumulators stay 32 bits wide, so inputs must be small enough
  that no dot product overflows them. `LANES` must be a power of two.
- Throughput. The paper reports 284.7 images/s for a small ResNet-like network.
  With 8 MACs per cycle, a network of about 40 M MACs per image (a CIFAR-sized
  ResNet-20; this estimate is not from the paper) would need about 1.4 GHz to
  match. Reaching that throughput at FPGA clock rates needs about 5–10 times
  more lanes or engines. With `LANES = 16` the workload bench runs in half
  the cycles, 197,941 per image.

## Files

| file | content |
|------|---------|
| `rtl/accel_pkg.sv` | configuration struct, mode enum, default sizes, register addresses |
| `rtl/accel_top.sv` | the core |
| `rtl/csr_axil.sv` | AXI4-Lite register file |
| `rtl/accel_ctrl.sv` | stream routing, job launch, bank release, job counter, overflow |
| `rtl/tile_buffer.sv` | two-bank tile buffer with full flags, back-pressure, overflow |
| `rtl/layer_engine.sv` | address generation and sequencing of one job; holds the three modules below and a result queue |
| `rtl/mac_array.sv` | 8 MAC lanes, max-pool mode |
| `rtl/psum_buffer.sv` | partial-sum RAM |
| `rtl/act_quant.sv` | ReLU, rounding shift, saturation |
| `rtl/out_fifo.sv` | FIFO: the engine's result queue and the core's output FIFO |
| `tb/<module>_tb.sv` | one self-checking testbench per module |
| `tb/cnn_workload_run.sv` | a small CNN run layer by layer through the core, for a given data width |
| `tb/cnn_workload_tb.sv`, `tb/cnn_workload_int16_tb.sv`, `tb/cnn_workload_lanes16_tb.sv` | that CNN on the default core, with 16-bit data, and with 16 lanes |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
Each one has a watchdog. Compile and run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/accel_pkg.sv tb/accel_top_tb.sv \
          --top-module accel_top_tb -Mdir obj_top
./obj_top/Vaccel_top_tb +verilator+rand+reset+2
```

The tests compute their expected values independently of the RTL. They
evaluate each layer directly from its definition, or keep a model of a memory
or queue.

- `accel_top_tb` runs the whole core at its default sizes. It issues eight
  jobs back to back:
  - a 3×3 convolution with ReLU over two groups;
  - a stride-2 convolution that keeps its weights;
  - a convolution that reuses those weights;
  - a 16-channel convolution split into two 8-channel tiles;
  - 2×2 max pooling;
  - a fully connected layer;
  - an oversized tile.

  It checks every output word and `tlast`, the job counter, `irq`, and the
  overflow flag and its clearing. It also requires each mechanism to occur at
  least once: transfer during computation, input back-pressure, output stall,
  partial-sum accumulation, weight reuse, pooling, fully connected, and
  overflow. At the end BUSYCYC must equal the cycle count worked out from the
  job shapes plus the stalls. It runs in well under a second.
- `cnn_workload_tb` classifies two random 32×32×3 images with a small
  ResNet-like network. It plays the host:
  1. a 3×3 convolution, 3→16 channels;
  2. a 3×3 convolution, 16→16 channels, then a residual add on the host;
  3. 2×2 max pooling;
  4. a stride-2 3×3 convolution, 16→32 channels;
  5. global average pooling on the host;
  6. a 32→10 fully connected layer.

  The host pads and packs every tile and unpacks the results. A separate
  reference network computes each layer on plain arrays. The two must agree
  on every activation. One image takes 395,747 cycles for 3,096,896 MACs, so
  on average 7.8 of the 8 lanes are busy. At 300 MHz that is 1.3 ms per image.
  `cnn_workload_int16_tb` runs the same network on a core built with
  `DATA_W = 16`, using larger value ranges and shifts. It takes the same
  number of cycles. `cnn_workload_lanes16_tb` runs it on a 16-lane core; the
  scores are the same and the cycles halve.
- `layer_engine_tb` checks the outputs and the exact cycle count of eleven jobs,
  among them back-to-back one-cycle windows.
  Meanwhile the output ready signal toggles at random, with long low
  stretches that fill the result queue.
- The other testbenches exercise their module alone: arithmetic edge cases,
  AXI4-Lite handshakes with byte strobes, bank ownership, and FIFO flags.

Assertions in the RTL check the AXI4-Stream and AXI4-Lite hold rules, FIFO
overflow and underflow, and legal job configurations. They are enabled with
`--assert`.
