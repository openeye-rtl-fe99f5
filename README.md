# OpenEye: sparse, scalable DNN accelerator in SystemVerilog

This is a synthesizable SystemVerilog implementation of the OpenEye accelerator architecture. It is built from the description in
"OpenEye: A Scalable Open-Source Hardware Accelerator for DNNs". OpenEye is an
Eyeriss-v2-style spatial array:

- Processing elements (PEs) work directly on compressed sparse column (CSC) activations and
  weights, and multiply only nonzero pairs.
- PEs are grouped into PE clusters. Each PE cluster is wrapped with routers and an activation
  function unit to form an OpenEye cluster.
- Clusters are tiled in a 2-D grid, the parallel back end.
- A serial front end feeds the grid. It has a 64-bit host port, three on-chip RAMs and a
  command-driven control FSM.

The default build is 2 x 2 clusters of 4 x 3 PEs each (48 PEs). It uses 8-bit signed data and
20-bit partial sums, runs on one clock, and uses an asynchronous active-low reset `rst_n`.

## Hierarchy

```
oe_top                      whole accelerator (Wishbone slave port, busy, done)
 +- oe_wb_slave             64-bit Wishbone host port, command queue (oe_fifo)
 +- oe_ram x3               IAct, Weight, PSUM RAMs (64-bit, 16384 words)
 +- oe_serial_ctrl          central control FSM, 3 stream readers (oe_stream_reader)
 +- oe_parallel             CLUSTER_ROWS x CLUSTER_COLS grid
     +- oe_parallel_ctrl    per-cluster configuration registers, command broadcast
     +- oe_cluster x N
         +- oe_router x3    IAct, weight and PSUM routers (oe_fifo per output)
         +- oe_act_fn       ReLU / bypass
         +- oe_pe_cluster   PE_X x PE_Y array
             +- oe_pe       sparse MAC PE
                 +- oe_spad x4   IAct/weight address and data scratchpads
                 +- oe_lvt_ram   PSUM RAM, multi-ported by a live value table
```

`oe_pkg` holds the word formats and constants. Every link between units is a valid/ready stream: a
word moves on a rising clock edge where both are high. Routers and PE outputs register every output in
a 2-entry FIFO. Ready therefore never depends combinationally on the far side, and the
grid has no combinational loops.

## How a layer runs

1. **Host to RAMs.** The host writes 64-bit words to the command queue. A `WRITE_RAM` command
   copies the next *n* queue words into one of the three RAMs.
2. **Configuration.** `CFG` commands write the registers of one cluster, or of all clusters at
   once (cluster 0xFF). The registers hold:
   - the router selects;
   - the IAct multicast mask (which PEs take the activation bus);
   - the weight row mask (which PE rows take weights);
   - the PSUM column (which PE column is tied to the PSUM bus);
   - the PE settings (`n_cols` activation columns per PE, `n_m` output rows);
   - the activation mode.
3. **Streaming.** `SEND` streams a RAM region to the clusters in the background. Each RAM word
   carries its destination cluster in bits [63:56] (0xFF = every cluster) and a
   payload in its low bits:
   - an `iact_word_t` for activations;
   - a `weight_word_t` for weights;
   - a `psum_t` for bias or partial sums.

   Inside a cluster, the IAct router sends activations to the PE cluster and/or to any neighbour
   (N, S, E, W). The weight router sends weights to the PE cluster and/or east. The PSUM router
   moves sums north or south. One
   input can feed several outputs (multicast). It is consumed only when every selected output can
   take it.
4. **Load.** In the PE cluster, the activation bus delivers each word to every PE set in the
   mask. With the mask chosen so that input row *r* reaches all PEs with x + y = r, this is the
   diagonal reuse of the row-stationary mapping. Weights enter the left PE of every selected row
   and are copied PE to PE to the right.
5. **Compute.** `CFG` to the command register pulses `start`. Every PE walks its nonzero
   activations, looks up the weight column of each activation's channel, and accumulates
   `psum[j][m] += W[m][c] * a[j][c]` in its PSUM RAM. Zeros are never stored, so they cost no cycles.
6. **Output.** An `out_go` pulse starts the output phase:
   - The bottom PE of the selected column takes a bias or incoming partial sum from the PSUM
     bus and adds its own sum.
   - Each PE above adds its own sum to what comes from below.
   - The top PE's result passes through the activation function into the PSUM router. That
     router either returns it to the front end or sends it north or south to the next cluster,
     where it becomes that cluster's bias input. This is how sums are accumulated across
     clusters.
7. **Collect.** `COLLECT` writes the next *n* results of one cluster into the PSUM RAM. `WAIT`
   stalls the command stream until all engines are finished, and optionally until every
   cluster is idle. `LAYER` counts a finished layer and `END` raises `done`. The host reads
   results from the PSUM RAM.

### PE timing

- Each nonzero activation costs one cycle to fetch its weight-column bounds, plus one cycle per
  weight word (one MAC per SIMD lane), plus one cycle to move on.
- Each column end costs one cycle, and the phase ends one cycle later.
- The output phase emits one sum per cycle when not back-pressured.
- PSUMs persist across compute phases until `clear`, so several passes accumulate.

## Formats and maps

| Item | Encoding |
|---|---|
| `iact_word_t` (13 b) | `{is_addr, val[7:0], idx[3:0]}`. An address word's `val` is the exclusive end pointer of the next column. A data word is a nonzero value at row (input channel) `idx`. |
| `weight_word_t` | `{is_addr, SIMD x {vld, m[3:0], w[7:0]}}`. An address word's lane 0 `w` is the end pointer of the weight column of the next channel `c`. A data word holds weight `w` for output row `m`. |
| Command word | `[63:60]` opcode: NOP 0, WRITE_RAM 1, SEND 2, COLLECT 3, CFG 4, WAIT 5, LAYER 6, END 7. `[57:56]` RAM (0 IAct, 1 Weight, 2 PSUM). `[55:48]` cluster. `[47:32]` count, or register address for CFG. `[31:0]` base, or register value for CFG. |
| CFG address | `[15:8]` cluster (0xFF = all). `[3:0]` register: 0 IAct selects, 1 weight selects, 2 PSUM selects, 3 IAct mask, 4 weight row mask, 5 PSUM column, 6 PE settings, 7 activation mode, 15 command (bit 0 clear, 1 start, 2 out_go). |
| Router selects (3 bits per output; an out-of-range value = unused) | IAct outputs PE, N, S, E, W take inputs EXT 0, N 1, S 2, E 3, W 4. Weight outputs PE, E take EXT 0, W 1. PSUM outputs PE, N, S, EXT take EXT 0, N 1, S 2, results 3. |
| Wishbone map (byte address bits [23:20]) | 0x00_0000: status read `{done, busy, 14'b0, layer_count, 32'b0}`. 0x10_0000: command queue write (16 deep; writes wait while it is full). 0x20_0000: PSUM RAM word `adr[16:3]`, ack after 2 cycles. |
| Collected result | `{cluster, sign-extended psum}` in the PSUM RAM. Because it carries its cluster as destination, a later `SEND` of the same region returns the sums to that cluster as bias, so a layer too large for one pass accumulates over passes on chip. |

Cluster index `I = row * CLUSTER_COLS + col`. Row 0 is the southern edge. Links that leave the grid are
tied off.

## Parameters (top level)

| Parameter | Default | Origin |
|---|---|---|
| `CLUSTER_ROWS`, `CLUSTER_COLS` | 2, 2 | Block diagram draws 2 x 2. The evaluation varies the rows from 1 to 8. |
| `PE_X`, `PE_Y` | 4, 3 | The evaluated 4 x 3 array, which matches the Eyeriss v2 PE organisation. 2 x 3, 2 x 4 and 4 x 4 are the other evaluated shapes. |
| `IACT_ADDR_DEPTH`, `IACT_DATA_DEPTH` | 9, 16 | Eyeriss v2 scratchpad sizes (the source only says "configurable") |
| `W_ADDR_DEPTH`, `W_DATA_DEPTH` | 16, 96 | Eyeriss v2 scratchpad sizes |
| `PSUM_DEPTH` | 32 | Eyeriss v2 |
| `RAM_DEPTH` | 16384 | Own choice. It holds the largest MNIST feature map (12544 outputs). |
| `oe_pkg::SIMD`, `DATA_W`, `PSUM_W` | 1, 8, 20 | SIMD is a parameter in the source with no value given. 8-bit comes from the evaluated network. The PE and top testbenches pack SIMD weights per word and pass at SIMD=2 as well; at SIMD=2 the top test's compute phase drops from 50 to 39 cycles. The other testbenches put one weight in each word. They have been run at SIMD=1 only. |

## What follows the source and what is this design's own

**Follows the source:**
- Serial front end and parallel back end.
- 64-bit host port.
- Separate IAct, weight and PSUM RAMs.
- A central layer-iterating FSM that configures the routers.
- Clusters made of a PE cluster, an activation unit and three routers linked to their neighbours.
- Activations routable in every direction, weights only horizontal (unidirectional), PSUMs
  vertical in both directions.
- Ready/enable handshakes.
- Inside the PE cluster: an activation bus, horizontal weight propagation and vertical PSUM
  accumulation, with a bias entering at the bottom PE.
- PEs that decode sparse data from address/data RAMs.
- A SIMD parameter.
- PSUM RAMs built with a live value table from 1W/1R memories.

**This design's own choices:**
- All encodings, the command set, the register and address maps, and the PE cycle costs.
- Using an absolute row index instead of the zero run length of Eyeriss v2.
- Wishbone rather than AXI.
- ReLU as the activation function (the source only names the unit).
- Masked multicast as the way diagonal activation delivery is configured.

**Not built, or different from the source:**
- *Global buffers.* The source's own implementation does not instantiate them. Biases
  therefore arrive as PSUM-stream words from the PSUM RAM.
- *On-chip layer chaining.* The source keeps each layer's output feature map on chip and
  sends only weights and biases for later layers. Here the results stay in the PSUM RAM, but
  the step that turns them into the next layer's sparse activations is not described in the
  source and is not built. The host reads the results back and sends them again as activations.
- *Max pooling.* The evaluated network has pooling layers, but the source describes no unit for
  them. The host does it.
- *Mapping software.* The tiling of layers onto PEs and clusters is the host's job. No compiler
  is included.

## Mapping a layer: passes

A PE holds little: at most 16 nonzero activations in 9 columns, 96 weights and 32 sums. A layer is
therefore cut into *passes*. In each pass the host does the following:

1. Clear all PEs.
2. Send the weights, one filter row per PE row.
3. Send the activation rows along the diagonals.
4. Start the compute phase.
5. Run the output phase column by column.

The mapping used by the MNIST testbenches works like this:

- **Convolution rows.** Each cluster owns a band of `PE_X` output rows. PE column x is the row
  inside the band, and PE row y is the filter row.
- **Horizontal taps.** The three horizontal filter taps are folded into the CSC row index
  (row = 3 x channel-in-group + tap). One PE therefore covers 2 output columns x 16 filters
  for 1 input channel (conv 1) or 2 input channels (conv 2, conv 3).
- **Accumulation across passes.** When a layer needs several passes for the same outputs
  (more input channels than fit), the sums are carried on chip. Each pass collects its results
  into the PSUM RAM. A collected word carries its cluster as destination, so the next pass
  sends that same region back to the cluster as its bias. Only the last pass applies ReLU.
- **Dense layers.** A fully connected layer is a single activation column. Each PE holds
  6 inputs x 16 outputs, and a PE column sums 18 inputs on its way up.

## Capacity and speed on the evaluated network

The evaluated MNIST CNN has these layers:

- 3 x 3 same-padded convolutions 28x28x1 to 16, 14x14x16 to 32 and 7x7x32 to 32, each followed
  by 2 x 2 max pooling;
- dense layers 1568 to 32 and 32 to 10.

Every convolution and dense layer runs on the default build and was simulated in full, with every
output checked:

| Layer | Passes | Cycles (including all host transfers) |
|---|---|---|
| conv 1 | 28 | about 92,000 |
| conv 2 | 112 | about 188,000 |
| conv 3 | 128 | about 131,000 |
| dense 1 | 88 | about 135,000 |
| dense 2 | 2 | about 1,200 |

The three RAMs hold every layer's data: at most 12544 results and 9216 weights. Dense 1 is the
exception. Its 50176 weights exceed one RAM, so they are streamed in per pass.

The network as a whole does not run on chip, because pooling and layer chaining run on the
host.

**Speed.** At 200 MHz the five layers take about 2.7 ms. The source reports 115 to 306 us per
inference for its configurations, so this implementation is roughly ten times slower. Every
pass re-sends its weights and activations through the 64-bit port, one word per command-queue
entry. Clear, load, compute and output also run one after another, with no overlap between
passes. The trend with cluster count matches the source: the same conv 1 layer takes about
168,000 cycles with 2 clusters of 4 x 4 PEs, and about 69,000 with 16 clusters of 2 x 4 PEs.

## Verification

Each unit has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each one:
- drives random traffic with random back-pressure;
- compares against a reference model;
- ends with `TB_RESULT checks=N failures=M`.

Block tests mostly use small arrays.

| Testbench | What it runs |
|---|---|
| `tb_oe_top` | Default size. Three clusters cooperate on one layer: weights shared east, diagonal multicast, PSUMs accumulated north across clusters, ReLU, host-port stalls, zero skipping. It counts each mechanism and fails if one never happened. |
| `tb_oe_mnist_conv1` | MNIST conv 1 in full at the default size. |
| `tb_oe_mnist_conv23` | MNIST conv 2 and conv 3 in full at the default size. |
| `tb_oe_mnist_dense` | Both MNIST dense layers at the default size. |
| `tb_oe_table3_r8_2x4` | Conv 1 on 8 x 2 clusters of 2 x 4 PEs (top parameters overridden). |
| `tb_oe_table3_r1_4x4` | Conv 1 on 1 x 2 clusters of 4 x 4 PEs. |

The MNIST testbenches use synthetic data of the right shapes and sparsity. They do not use a
trained network.

To simulate with Verilator (5.x), run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
          --top-module tb_oe_mnist_conv1 rtl/oe_pkg.sv tb/tb_oe_mnist_conv1.sv
./obj_dir/Vtb_oe_mnist_conv1
```

Each of these runs takes seconds.
