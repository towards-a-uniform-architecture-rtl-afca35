# One PE fabric for 2D and 3D deconvolution

A deconvolution (transposed convolution) layer with stride S and a K x K (x K)
kernel grows every input activation into a K x K (x K) block of products. The
output map is the sum of those blocks. The block of each activation is placed
S positions from its neighbour's block, so neighbouring blocks overlap by
K - S along each axis. There are two ways to compute this:

- **Output-oriented.** Compute each output as a convolution over a zero-stuffed
  input. Most of the multiplications are then by inserted zeros.
- **Input-oriented mapping (IOM).** Each processing element (PE) holds one
  input activation. It multiplies that activation by every kernel weight and
  produces that activation's whole result block. Every product is useful. The
  only extra work is adding the overlapping parts of neighbouring blocks.

This RTL implements input-oriented mapping on a three-dimensional mesh of PEs.
The overlaps are added inside the mesh while the products are formed. Each PE
passes its overlap elements to the neighbour that owns them, through small
FIFOs:

- up a row (FIFO-V);
- left along a row (FIFO-H);
- back one depth plane (FIFO-D).

The same fabric runs 2D layers by switching off the depth links and giving
every plane its own input channel.

Default size (the architecture's main configuration):

| parameter | default | meaning |
|---|---|---|
| `TM` | 2 | output channels computed in parallel (PE groups) |
| `TN` | 16 | input channels per group in 3D mode |
| `TZ` | 4 | depth planes per input channel in 3D mode |
| `TR` x `TC` | 4 x 4 | PEs per plane (input rows x columns) |
| `K` | 3 | kernel size, 3 x 3 or 3 x 3 x 3 |
| data | 16 bit | signed fixed-point activations and weights |

At the default size this is `TM*TN*TZ*TR*TC` = 2048 PEs (multipliers).

## Tiling of a layer

A layer is computed block by block:

- An input block is `TR x TC` positions, times `TZ` depth slices in 3D, for `TM`
  output channels.
- Its input channels are run in **passes**. One pass covers `TN` channels in
  3D mode and `TN*TZ` channels in 2D mode.

The loop order of the layer controller (`dcnn_accel`), outermost first:

    output-channel group (TM) -> depth block (TZ, 3D only) -> row block (TR)
      -> column block (TC) -> input-channel pass

Each pass has three steps:

1. The memory controller fills the input buffer (one activation per PE) and
   the weight buffer (one kernel per output channel and plane).
2. The engine runs, and its results are added into the output buffer.
3. After the last pass of a block, the output buffer is written back to DRAM.

The output buffer holds the full result area of one block:

- rows: `(TR-1)*S + K`
- columns: `(TC-1)*S + K`
- depth: `(TZ-1)*S + K`

This area is sized for the largest supported stride, `SMAX` = 3. The K - S
wide rim of a block overlaps the next block's area. It is therefore merged in
DRAM: the write-back reads each DRAM word, adds the block's value and writes
the sum back. So **the output area in DRAM must be zero before a layer
starts**.

## Inside one pass: the PE schedule

All planes run the same cycle-by-cycle schedule. `KV` is the number of kernel
elements: K² in 2D mode, K³ in 3D mode.

- **Cycles 0 .. TC-1.** In cycle `y`, column `y` of every plane latches its
  activations from the input buffer.
- **Cycles 0 .. KV-1.** In cycle `t`, kernel element `t` enters column 0 of
  every plane. Elements are ordered kw fastest, then kh, then kd, as in the
  worked dataflow example of the source architecture. The weights then move
  one column to the right per cycle. So PE (x, y) multiplies element `k` in
  cycle `k + y`.
- **Last product.** Every PE has formed its KV products by cycle `KV + TC`. The
  engine counts exactly `KV + TC` compute cycles per pass. The testbenches
  check this count.

### Where an element goes

Each PE routes result element (kd, kh, kw) as follows. Here `o = K - S`.

| condition | destination |
|---|---|
| 3D, depth plane > 0, `kd < o` | FIFO-D of the plane in front |
| else row > 0, `kh < o` | FIFO-V of the PE above |
| else column > 0, `kw < o` | FIFO-H of the PE to the left |
| otherwise | this PE's result FIFO |

Some elements are owned by this PE but overlap a neighbour's block. Before
storing such an element, the PE must add the partial sums its neighbours send
for it. It knows from its own position which neighbours will send:

- **From the plane behind:** when a plane exists behind it and `kd >= S`.
- **From the row below:** when a row exists below, `kh >= S`, and the element
  was not already passed on to the plane in front.
- **From the right:** when a column exists to the right, `kw >= S`, and the
  element was passed neither to the front nor up.

The PE then adds its product and the heads of all the FIFOs involved in one
cycle.

Columns start one cycle apart. Routing upwards and forwards adds only one
extra cycle. So with S >= 2, a contribution is always in its FIFO before the
owner needs it. Strides of 1 are refused by an assertion.

### Depth of the overlap FIFOs

A FIFO must hold every contribution that can wait in it:

| FIFO | depth | default (K = 3) |
|---|---|---|
| FIFO-D | `K*K*(K-2)` | 9 |
| FIFO-V | `K*(K-2)` | 3 |
| FIFO-H | 2 | 2 |
| result | `K³` | 27 |

### Draining the results

Each result carries a tag: its position (oh, ow, od) inside the output area of
the block. A PE first fills its result FIFO with its own elements. After its
last element it also accepts the results of the PE to its right. The leftmost
PE of each row feeds that row's result port. Every plane produces its results
in the same cycles. This lets an adder tree per row (and depth lane) add the
`TN` input channels directly.

### 2D and 3D mode

**3D mode.**
- Plane `z` of input channel `n` holds depth slice `d0 + z`.
- FIFO-D links plane z+1 to plane z.
- Each row and lane z has a first-level tree that adds the `TN` channels.
- Up to `TR*TZ` results per output channel enter the output buffer per cycle.

**2D mode.**
- All `TN*TZ` planes hold separate channels.
- FIFO-D is off.
- A second small tree per row adds the `TZ` first-level sums. Only lane 0 is
  valid.

The kernel of an input channel is the same for all its depth planes. So in 3D
mode one weight fetch is written to all `TZ` planes at once.

## Blocks and files

The order follows the data path. Each file opens with a description of its
interface and timing.

| module | role |
|---|---|
| `dcnn_pkg` | Shared types: data and accumulator words, result tag, layer descriptor, memory request. |
| `pe` | Multiplier, routing decode, FIFO-V/H/D, three-way add, result FIFO with chain input. |
| `sync_fifo` | Fall-through FIFO used for all PE queues and the read-destination queue. |
| `pe_array` | One plane of `TR x TC` PEs with its vertical, horizontal and result links. |
| `adder_tree` | Pipelined binary tree, latency ceil(log2 N). |
| `compute_engine` | `TM x TN x TZ` planes, pass sequencer, first- and second-level adder trees. |
| `input_buffer`, `weight_buffer` | Register arrays written one word at a time, read in parallel by the engine. |
| `output_buffer` | Multi-port accumulate, plus a read-and-clear port for the write-back. Clears itself after reset. |
| `mem_ctrl` | Load-input, load-weights and store jobs over a one-word DRAM port. Up to 8 reads in flight. |
| `dcnn_accel` | Top level and layer controller. |

### Top-level interface (`dcnn_accel`)

`cfg` (type `layer_cfg_t`) describes one layer. It must stay stable from
`start` until `done`. Its fields:

| field | meaning |
|---|---|
| `mode3d` | 3D (1) or 2D (0) layer |
| `stride` | 2 or 3 |
| `ih`, `iw`, `id` | input height, width, depth (`id` = 1 for 2D) |
| `nc`, `mc` | input and output channels |
| `pad` | number of rows/columns/slices removed from the low edge of the full output |
| `oh`, `ow`, `od` | output size kept after removing `pad` |
| `in_base`, `w_base`, `out_base` | word addresses of the three DRAM arrays |

The full output is `(i-1)*S + K` along each axis.

DRAM layouts, one 32-bit word per element, last index fastest:

- input `[ic][d][h][w]`
- weights `[oc][ic][kd][kh][kw]`
- output `[oc][d][h][w]`

Activations and weights are the low 16 bits of their words. Sums are 32 bits.

The memory port (`mem_req_vld/mem_req/mem_req_rdy`, `mem_rsp_vld/mem_rsp_data`):

- one word per request, with a valid/ready handshake;
- read data returned in request order, with any latency;
- writes need no response.

`start` is a one-cycle pulse, accepted while `busy` is low. `done` is a
one-cycle pulse. The statistics outputs count the following for the last
layer:

- `stat_cycles`: all cycles;
- `stat_mac_cycles`: cycles in which the PEs were computing;
- `stat_passes`: passes.

PE utilisation is `stat_mac_cycles / stat_cycles`.

## Where this RTL departs from the architecture it follows

- **Utilisation.** The source architecture reports over 90 % PE utilisation.
  This RTL loads, computes and stores one after the other, with no double
  buffering, over a port of one word per cycle. At the default size, one pass
  needs about 30 compute cycles and roughly 1,000 to 3,000 memory cycles.
  Utilisation is therefore about 1 % on real layers. The
  architecture does not say how it overlaps memory traffic with compute, or
  how wide its DRAM path is. Adding ping-pong input and weight buffers and a
  wide DRAM port is the obvious next step. Neither is built here.
- **Rim merging in DRAM.** Block rims are merged by read-add-write in DRAM.
  This is this design's own choice; the architecture leaves it open.
- **Adder tree count.** The architecture counts one tree per PE column. Here
  there is one tree per PE row. The two are the same whenever `TR = TC`, as in
  the default configuration.
- **2D-mode tree.** The second-level tree that adds the `TZ` lanes in 2D mode
  is this design's own.
- **Own choices the architecture does not give.** These include:
  - the one-cycle column skew;
  - the three-input add;
  - the FIFO depths;
  - the 32-bit accumulators;
  - the tags;
  - the drain order of the result chain.
- **Stride.** Strides are 2 or 3 (`SMAX` = 3) at run time. Stride 1 would need
  a deeper skew and is rejected by an assertion.
- **Rounding.** There is no rounding, saturation or activation function.
  Outputs are full 32-bit sums.
- **DRAM.** The DRAM itself is not part of the RTL. `tb/ddr_model.sv` is a
  behavioural stand-in. It applies random back-pressure and a fixed read
  latency.

## Sizes of real networks

The design blocks every layer, so layer size is limited only by its address
and dimension fields:

- 32-bit word addresses;
- 16-bit dimensions;
- 5-bit tags, enough for output areas up to 32 per side.

The networks the architecture targets all fit. The layer sizes below are the
usual published ones for these networks, used with 3 x 3 (x 3) kernels and
stride 2. At the default size the pass counts are:

| network | layers | passes |
|---|---|---|
| DCGAN | 4x4x1024 → … → 64x64x3 | 12,544 |
| GP-GAN | 4x4x512 → … → 64x64x3 | 3,200 |
| 3D-GAN | 4³x512 → … → 64³x1 | 30,720 |
| V-Net up path | 8³x256 → … → 128³x32 | 475,136 |

Each pass takes `KV + TC` compute cycles. With the sequential phases, memory
time dominates, as described above.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. All data is
random (`$urandom`). The expected values are computed independently in the
testbench.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | random push/pop against a queue model, including full and empty |
| `tb_adder_tree` | N = 1, 5 and 16: sums, tags, and latency ceil(log2 N) |
| `tb_pe` | a two-PE column: vertical overlap addition, tags, weight forwarding, result chain |
| `tb_pe_array` | a 3 x 3 plane at strides 2 and 3: every output position once, with the right sum |
| `tb_compute_engine` | 2D and 3D passes at strides 2 and 3 against a scatter model; compute cycle count |
| `tb_input_buffer`, `tb_weight_buffer`, `tb_output_buffer` | contents against models: broadcast writes, accumulation, read-and-clear, self-clear |
| `tb_mem_ctrl` | all three jobs against the DRAM model: edge blocks, channels beyond the count, padding, the rim add |
| `tb_dcnn_accel` | reduced size (TM=2, TN=2, TZ=2, 2 x 3 PEs); see below |
| `tb_dcnn_accel_full` | the default size (2048 PEs), with no parameter overrides; see below |

**`tb_dcnn_accel`** runs three complete layers and compares every output word:

- 3D at stride 2, with cropping, several blocks and several passes;
- 2D with two passes;
- 3D at stride 3, which has no overlaps.

It also counts how often each mechanism happens, and fails if one never does:

- vertical, horizontal and depth overlap transfers;
- result forwarding;
- both modes;
- multi-pass accumulation;
- rim merging;
- cropping;
- memory stalls.

**`tb_dcnn_accel_full`** runs three layers in the same way at the default size:

- 3D with 20 input channels, needing two passes and two column blocks;
- 2D with 64 channels;
- 3D at stride 3.

Verilator builds this model in a few minutes, and it runs in about 1.5 minutes.

To simulate with Verilator 5 (two-state, `--timing` for the testbench delays),
list the package first:

    verilator --binary --timing --assert --top-module tb_dcnn_accel \
        rtl/dcnn_pkg.sv rtl/*.sv tb/ddr_model.sv tb/tb_dcnn_accel.sv
    ./obj_dir/Vtb_dcnn_accel

(`rtl/dcnn_pkg.sv` appears twice in that line, which Verilator accepts. Drop it
from the glob if your tool does not.) Only `tb_mem_ctrl`, `tb_dcnn_accel` and
`tb_dcnn_accel_full` need `tb/ddr_model.sv`.

To change the size, override the `dcnn_accel` parameters. Keep these rules:

- `TR*S+K` and `TC*S+K` must stay within the 5-bit tag (32).
- `K` sets the FIFO depths.
- `SMAX` sets the output-buffer size.
