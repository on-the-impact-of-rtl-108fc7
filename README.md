# A convolution accelerator that accumulates partial sums in the memory controller

When a convolution layer has more input and output feature maps than the
multiplier array can cover at once, the layer is computed in tiles: `m` input
maps and `n` output maps at a time. Every output map then receives `M/m`
contributions (one per input tile), called partial sums. In a conventional
system each contribution after the first costs a round trip: the accelerator
reads the stored partial sum over the bus, adds its new one and writes the
total back. This design removes the read. The accelerator sends each new
partial sum once, tagged with a command on the AXI4 `AWUSER` sideband. The
memory controller reads the stored word, adds the new one, optionally applies
an activation function (ReLU), and writes the result back. This is a
read-update-write inside the memory subsystem.

The arrangement follows M. Chandra, "On the Impact of Partial Sums on
Interconnect Bandwidth and Memory Accesses in a DNN Accelerator". That paper
gives the idea and the analysis: the active memory controller, `AWUSER` as the
command path, the operation set (normal write, addition, activation) and the
tiled loop nest. It gives no circuit. Everything below the level of
"which block does what" is this implementation's own. That includes the
command encoding, bus widths, timing, data layout and the compute engine's
dataflow. The section *Where this departs from the paper* lists the choices.

## Block structure

```
 dnn_accel_top
 ├── compute_engine      AXI4 master: tiled convolution, sends partial sums + AWUSER command
 │   └── mac_array       KS*KS*M_T*N_T multipliers (504 by default)
 ├── axi_interconnect    five AXI4 channels, one register slice each (axi_skid), AWUSER carried along
 ├── active_mem_ctrl     AXI4 slave; plain write / read-update-write / activation; activation register
 │   └── psum_update_alu the arithmetic: wdata, old+wdata, act(wdata), act(old+wdata)
 └── sram_sp             single-port SRAM, 8M x 32 bit (32 MiB)
```

`dnn_pkg` holds the shared types: the AXI channel structs, the layer
configuration struct and the command and activation enums.

One bus word is 32 bits and carries one activation or one partial sum. A count
of data beats on the bus is therefore a count of activations moved. The paper
measures bandwidth in the same unit.

## The AWUSER command

Each write burst carries a 2-bit command on `AWUSER` (`dnn_pkg::mc_op_e`). It
applies to every beat of the burst:

| AWUSER | name         | stored word            | SRAM accesses per beat |
|--------|--------------|------------------------|------------------------|
| `00`   | `OP_NORMAL`  | `wdata`                | 1 write                |
| `01`   | `OP_ADD`     | `mem + wdata`          | 1 read + 1 write       |
| `10`   | `OP_ACT`     | `act(wdata)`           | 1 write                |
| `11`   | `OP_ADD_ACT` | `act(mem + wdata)`     | 1 read + 1 write       |

Bit 0 means "accumulate" and bit 1 means "activate". `act` is selected by a
configuration register in the controller. The register is written through
`cfg_we`/`cfg_act_sel` (`act_cfg_we`/`act_cfg_sel` at the top), resets to
identity, and can be read back on `act_sel`. The choices are `ACT_NONE`
(identity) and `ACT_RELU`. Addition wraps modulo 2^32. Bytes whose `WSTRB`
bit is low keep their stored value; with the command applied, that means the
low bytes of the sum.

The compute engine uses the commands like this:

| input tile                          | command                              |
|-------------------------------------|--------------------------------------|
| first (`ci_base = 0`)               | `OP_NORMAL`: initialises the output  |
| middle                              | `OP_ADD`                             |
| last, layer has `relu` set          | `OP_ADD_ACT` (`OP_ACT` if only one tile) |
| last, `relu` clear                  | `OP_ADD` (`OP_NORMAL` if only one tile)  |

Partial sums are never read back over the bus. Reads are only for input maps
and weights.

## Memory controller timing

`active_mem_ctrl` serves one burst at a time. If a read address and a write
address arrive in the same cycle, reads and writes take turns. The SRAM has a
single port, so the rates are:

- plain write (`OP_NORMAL`, `OP_ACT`): one beat per cycle, `WREADY` high throughout;
- accumulating write (`OP_ADD`, `OP_ADD_ACT`): one beat per two cycles. In the
  first cycle the beat is accepted and the old word is read. In the second the
  result is written. `WREADY` is low during the second cycle;
- read: one beat per two cycles (SRAM read, then the R beat, held until `RREADY`);
- the write response comes one cycle after the last beat and waits for `BREADY`.

Only INCR bursts of full 32-bit beats are handled. `AxSIZE` and `AxBURST` are
not decoded. Addresses wrap at the SRAM size and every response is OKAY.
Concurrent assertions check the AXI hold rules and `WLAST` placement on the
slave side.

The in-memory update does not reduce SRAM accesses: an accumulated word is
still read once and written once, as it would be with a read over the bus
followed by a write. What it removes is the read-back transfer across the
interconnect: the bus carries each partial sum once.

## Compute engine: tiling and traffic

The engine runs a zero-padded `KS x KS` convolution with stride 1 or 2
(`cfg.stride2`). With stride 1 the output maps have the input's size `W x H`;
with stride 2 they are `Wo x Ho = ceil(W/2) x ceil(H/2)`. The loop order is the paper's: output-map tiles
outermost, input-map tiles inside.

```
for co_base = 0, n, 2n, ... < N            // output-map tile
  for ci_base = 0, m, 2m, ... < M          // input-map tile
    load the n*m*KS*KS weights of the tile (n bursts)
    for each output pixel (window centre y, x in the input):
      (input rows y-1 .. y+1 are in the line buffer; each row is fetched once per tile)
      gather the KS x KS window of the m maps      KS*KS+1 cycles
      p_sum[0..n-1] = mac_array(window, weights)   2 cycles
      write p_sum[0..n-1] in one burst of n beats with the command above
```

Memory layout:

- feature maps are pixel-major (HWC): word `(y*W + x)*C + c`;
- weights are stored at word `((co*M + ci)*KS + ky)*KS + kx`;
- `cfg.in_base`, `cfg.wt_base` and `cfg.out_base` are byte addresses.

With this layout the `m` channels of one input pixel and the `n` partial sums
of one output pixel are contiguous, so each is one burst.

Bus words per layer, which the testbenches check exactly:

| traffic          | words                    |
|------------------|--------------------------|
| input maps       | `W*H*M * N/n`            |
| weights          | `N*M*KS*KS`              |
| partial sums out | `Wo*Ho*N * M/m`          |
| partial sums in  | 0 (would be `Wo*Ho*N * (M/m - 1)` without in-memory update) |

The input and output rows are the paper's equations (2) and (3). Equation (3)
counts a write and a read-back for every tile after the first, `2M/m - 1`
passes in all. Here only the `M/m` writes remain.

**Choosing m and n.** The array has `KS*KS*M_T*N_T` multipliers. Any
`m <= M_T`, `n <= N_T` can be set per layer; unused lanes get zero weights.
`M` must be a multiple of `m` and `N` a multiple of `n`. The paper's
first-order rule picks, for `P` multipliers,
`m = sqrt(2 * Wo*Ho * P / (Wi*Hi * KS^2))`, rounded to a divisor of `M`, and
`n = P / (KS^2 * m)`. It minimises `W*H*M*N/n + W*H*N*(2M/m - 1)`. That choice
is made by software when a layer is mapped. The hardware only takes `m_tile`
and `n_tile` in the layer configuration. The default array (`M_T = 8`,
`N_T = 7`, 504 multipliers) is sized for the rule's optimum with `P = 512`:
`m ≈ 10.7` for equal input and output sizes. It is limited to 8 x 7 so that
`KS^2*m*n < 512`.

The engine's dataflow is deliberately simple: one burst in flight, one pixel
at a time, a serial window gather. The multiplier array is therefore idle
most of the time. About 14,800 cycles for a 6x5x24 -> 14-map layer is typical.
The design shows the partial-sum traffic, not peak throughput.

## Interconnect

`axi_interconnect` connects one master to one slave. Each of the five channels
passes through `axi_skid`, a two-entry register slice: one cycle of latency,
one transfer per cycle, and a stall on one side never drops or reorders a
transfer. `AWUSER` is simply part of the registered AW payload. Any AXI fabric
that carries user bits end to end would serve; the point is that the command
must survive the interconnect.

## Interfaces of the top

| port                        | dir | meaning |
|-----------------------------|-----|---------|
| `clk`, `rst_n`              | in  | clock, asynchronous active-low reset |
| `act_cfg_we`, `act_cfg_sel` | in  | program the activation register (`act_sel_e`) |
| `act_sel`                   | out | activation register |
| `start`                     | in  | one-cycle pulse; samples `cfg` |
| `cfg` (`layer_cfg_t`)       | in  | `width`, `height`, `in_ch` (M), `out_ch` (N), `m_tile`, `n_tile`, `relu`, `stride2`, three base addresses |
| `busy`, `done`              | out | running; one-cycle pulse when the layer is complete |

The SRAM has no host port. The surrounding system (here the testbench,
hierarchically through `u_sram.mem`) places the inputs and weights and reads
the outputs.

Parameters of `dnn_accel_top`, with their defaults:

- `KS = 3`: kernel size;
- `M_T = 8`, `N_T = 7`: array tile bounds;
- `W_MAX = 224`: widest map the line buffer holds;
- `MEM_WORDS = 8388608`: SRAM depth (32 MiB), enough for the largest VGG-16
  layer (conv1_2: 6,459,392 words of input, output and weights).

Changing `M_T`/`N_T` scales the multiplier array. For example, 16 x 14 gives
2016 multipliers for a 2048-MAC budget.

## Where this departs from the paper, and what is missing

- The paper writes "n input maps and m output maps" in one sentence. Its loop
  code and its equations use `m` for input maps and `n` for output maps. This
  design follows the loop code and the equations.
- The paper says "a kernel KxK" but its loop runs the taps from `-K` to `K`.
  This design uses a `KS x KS` kernel with taps `-1..1` for `KS = 3`.
- The paper's loop shows no stride, but its bandwidth equations keep the
  output size apart from the input size. Strides 1 and 2 are built. Only dense
  3x3 convolution is supported. The networks the paper evaluates (AlexNet,
  VGG-16, SqueezeNet, GoogleNet, ResNet-18/50, MobileNet, MNASNet) also use
  1x1, 5x5, 7x7 and 11x11 kernels, a stride of 4, and depthwise layers. A 1x1 layer can run as a 3x3 with
  zero outer taps, at nine times the weight traffic. VGG-16 is the only one of
  these networks whose layers all have a supported shape, and every one of its
  layers fits the default SRAM. `tb_cnn_layer_slices` runs one whole VGG-16 layer and
  two slices; the whole network is not simulated.
- The paper mentions scaling before the activation and "compare" as possible
  controller operations without defining them. Neither is built. Activation
  choices are identity and ReLU.
- Widths are this design's own: 16-bit signed activations and weights (the low
  half of a bus word), 32-bit wrapping partial sums, 4-bit AXI IDs and 2-bit
  `AWUSER`.
- The partition rule for `m` and `n` is not hardware. It belongs to the
  software that maps layers, and the engine takes its result as configuration.

## Simulating

Every file in `rtl/` holds one module or package. Each `tb/tb_<module>.sv` is
a self-checking testbench that prints `TB_RESULT checks=N failures=F` and
stops itself with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dnn_accel_top \
    -y rtl rtl/dnn_pkg.sv tb/tb_dnn_accel_top.sv
./obj_dir/Vtb_dnn_accel_top
```

`-y rtl` lets Verilator find each module in `rtl/<module>.sv`. The package
must be named first.

What each testbench checks:

- **`tb_dnn_accel_top`** runs the whole design at its default parameters.
  It runs four layers: three input tiles with ReLU, a single-tile layer, a
  layer after switching the activation to identity, and a stride-2 layer. Every output is compared
  with a direct convolution, and the bus words are checked against the formulas
  above. It counts each mechanism: plain, accumulating, accumulate+activate and
  activate-only writes, read-update-write cycles, ReLU clamps, activation
  register changes, interconnect stalls and stride-2 layers. A mechanism that never occurs is a
  failure. For the first layer it reports 5,724 bus words, against 6,564 for a
  controller that needs the read-back (13% less). The weights dominate in that
  small example.
- **`tb_cnn_layer_slices`** runs one whole layer and full-width slices of two
  more layers of the evaluated networks on the default design. In the slices,
  rows and output maps are cut to keep the run short. The tile sizes come from the partition rule for 512
  multipliers. Every output and the bus traffic are checked.
  - VGG-16 conv1_2: 224 x 2 pixels, 64 -> 14 maps, stride 1, m = 8, n = 7.
    It moves 115,584 bus words against 159,488 with a read-back (28% less),
    in about 369,000 cycles.
  - ResNet-18 conv3_1: 56 x 4 pixels, 64 -> 14 maps, stride 2, m = 4, n = 7.
    It moves 49,280 bus words against 61,040 (19% less).
  - VGG-16 conv5_1, whole layer: 14 x 14 pixels, 512 -> 512 maps, stride 1,
    m = 8, n = 4. It moves 21,626,880 bus words against 27,949,056 (23% less).
  The three runs take about 75.6 million cycles together.
- **`tb_compute_engine`** runs the engine against a behavioural AXI memory
  that executes the commands itself. It uses random stalls and six layer
  shapes, two of them with stride 2, and checks outputs, exact traffic, the command of every word, and
  that the output region is never read.
- **`tb_active_mem_ctrl`** drives random bursts with all commands, random
  strobes and ID checks, and activation register changes. It also checks the
  read/write tie in both orders and the beat rates: 256 plain beats in 256
  cycles, 16 accumulated beats in 31.
- **`tb_axi_interconnect`** sends random traffic on all five channels and
  checks order, content and full-rate throughput.
- **`tb_mac_array`**, **`tb_psum_update_alu`** and **`tb_sram_sp`** check the
  arithmetic and the memory against reference models.
