# Mensa: three small accelerators instead of one large one

Edge neural-network models mix layers that want very different hardware. Early
convolutions do a lot of arithmetic on few parameters. LSTM gates and
fully connected layers touch megabytes of parameters exactly once. Deep or
depthwise convolutions fall in between. A single monolithic edge accelerator
sized for the first kind leaves most of its processing elements (PEs) idle on the
second. It also spends most of its energy moving parameters from DRAM.

Mensa groups layers into five clusters by parameter footprint, arithmetic
intensity and reuse. It gives each group of clusters its own accelerator with a
dataflow matched to that group. A runtime scheduler in host software assigns
every layer to one accelerator, and the layer runs there from start to end.

This repository holds synthesizable SystemVerilog for the three accelerators and
the system top that joins them. The runtime scheduler, the DRAM stack and the host
CPU are not included. Their side of each interface is brought out as ports, and
the testbenches stand in for them.

| Accelerator | Layers it runs | Where it sits | PEs | Buffers |
|---|---|---|---|---|
| Pascal   | Clusters 1 and 2: standard and pointwise convolutions with many MACs per parameter | next to the host, on chip | 32 x 32 | 256 KB activations, 128 KB parameters |
| Pavlov   | Cluster 3: LSTM gates and fully connected layers with huge, single-use parameter sets | in the logic layer of a 3D-stacked DRAM | 8 x 8 | 512 B private parameter buffer per PE, 128 KB activations |
| Jacquard | Clusters 4 and 5: deep convolutions with many filters, and depthwise convolutions | in the logic layer of the DRAM stack | 16 x 16 | 128 KB activations, 128 KB parameters |

All data is signed 8-bit. Every PE multiplies 8 x 8 bits and accumulates into 32
bits (`rtl/mac_pe.sv`).

## One layer, one command

The scheduler drives every accelerator through the same descriptor, `cmd_t`, in
`rtl/mensa_pkg.sv`. Its fields are:

- `target`: the accelerator that runs the layer.
- `op`: `OP_MATMUL`, or `OP_LSTM_CELL` on Pavlov.
- `rows`, `red`, `cols`: three sizes, whose meaning depends on the accelerator.
- `in_base`, `out_base`, `aux_base`, `par_base`: buffer base addresses.
- `shift` and `relu`: how results are requantised.
- `init_en`: Pavlov only; start the accumulators from stored values.

Every layer is written as a matrix product, `O[o][p] = sum_k W[o][k] * I[k][p]`.
A convolution with a spatial window is handed over with the window already
unrolled along `k`. This unrolling is done by the host, as an im2col-style
rearrangement in DRAM.

A result leaves the accumulator through `requant()`. That function shifts right
arithmetically by `shift`, saturates to 8 bits, then applies ReLU if `relu` is
set.

`mensa_top` routes a command to the accelerator named in `cmd.target`. It accepts
the command in a cycle where `cmd_valid` is high and `cmd_ready` is high.
`cmd_ready` is the ready signal of that target accelerator. The three
accelerators run at the same time and independently. `busy[i]`, `done[i]` (a
one-cycle pulse) and `layers_done[i]` use the `accel_e` value as the index
(0 Pascal, 1 Pavlov, 2 Jacquard).

Layers on different accelerators pass activations through DRAM. The buffers
therefore have DMA ports, served while the accelerator is idle, for the DRAM side
to fill and empty. Parameters only ever flow from DRAM into the accelerators.

## Pascal: output-stationary, parameter multicast

PE `n` owns one output pixel, `p = tile*N_PE + n`, and keeps its partial sum in
its own register. No partial sum ever moves between PEs. Each cycle:

- One parameter `W[o][k]` is read from the byte-wide parameter buffer and
  broadcast to all 1024 PEs.
- One 1024-byte row of the activation buffer is read. Byte `n` of that row is
  `I[k][p]` for PE `n`.

After `K` cycles the row of 1024 outputs is requantised. It is written back as
one buffer row in the same format as an input row, so Pascal layers chain with
no reformatting.

A (tile, output channel) pair costs `K + 2` cycles: `K` MACs, one cycle for the
last MAC behind the registered buffer read, and one write-back cycle. The
efficiency is therefore `K/(K+2)` of the 1024-MAC-per-cycle peak.

Buffer layouts:

- Parameters: `W[o][k]` at `par_base + o*K + k`.
- Input rows: `in_base + tile*K + k`.
- Output rows: `out_base + tile*Cout + o`.

## Pavlov: streaming parameters once, reusing them across time steps

Pavlov's layers are matrix-vector products (MVMs), `y = W x`, where `W` holds
megabytes and each element is used once per input vector. Pavlov streams
parameters straight from DRAM in storage order, which keeps the stream
sequential. It gets its reuse from LSTM time steps instead of from the matrix.

**Spreading the work.** PE `n` computes output row `r = tile*64 + n`. Each cycle
one input element `x_j` is read from the activation buffer and broadcast to all
64 PEs. The parameter stream (`ps_valid`, `ps_data`, `ps_ready`) delivers one
64-byte beat per column `j`. Byte `n` of the beat is `W[tile*64+n][j]`, and it
goes into PE `n`'s private 512-byte FIFO (`rtl/param_fifo.sv`). The stream is
accepted whenever every FIFO has room, also before a command arrives. A DRAM
that runs ahead therefore fills the FIFOs while earlier work finishes.

**Batching cells.** An LSTM computes the input MVM `W_x x_t` for every time step
`t`. None of these depends on another. Pavlov holds one parameter in the PE for
`B` consecutive cycles while the element `x_j` of `B` different time steps is
broadcast. Each PE keeps `B` partial sums in a small register file
(`mac_pe` with `NACC` entries). Each parameter is thus fetched once for `B` cells
instead of `B` times. `B` is set per command, up to `NACC = 16`.

**Stalls.** When the next parameter has not arrived, the reduction waits for that
cycle. `stall_cycles` counts such cycles.

**An LSTM layer as a sequence of commands:**

1. One `OP_MATMUL` per gate, batched over all time steps, for the input MVMs.
   Its outputs are requantised to 8 bits and stay in the activation buffer.
2. For each time step, one `OP_MATMUL` per gate for the hidden MVM
   `W_h h_{t-1}`, with `init_en` set. The accumulators start from the stored
   input-MVM result, scaled up by `2^shift`, so both products end up in one sum.
3. One `OP_LSTM_CELL` that applies the element-wise update with
   `rtl/lstm_cell_unit.sv`:
   `c_t = sigma(f) c_{t-1} + sigma(i) tanh(g)` and
   `h_t = sigma(o) tanh(c_t)`.

The cell unit uses Q3.4 fixed point, with 4 fraction bits, so 1.0 = 16. It
approximates the activation functions as hard sigmoid,
`clamp(x/4 + 1/2, 0, 1)`, and hard tanh, `clamp(x, -1, 1)`.

**Timing.** One MVM tile takes `(init_en ? B*64 : 0) + C*B + 1 + B*64` cycles if
the stream keeps up. Initialisation and write-back go one byte per cycle through
the byte-wide activation buffer. A cell update costs 9 cycles per element.

Buffer layouts:

- `x[b][j]` at `in_base + b*C + j`.
- `y[b][r]` at `out_base + b*R + r`.
- Initial values at `aux_base + b*R + r`.
- For a cell update: gates `i, f, g, o` at `in_base + {0,1,2,3}*H + n` and
  `c_{t-1}` at `aux_base + n`. The cell writes `c_t` at `out_base + n` and `h_t`
  at `out_base + H + n`.

## Jacquard: parameter-stationary, reduction across the array

For Cluster 4 and 5 layers a parameter is reused only over the `W x H` output
positions of its filter. Inputs are reused little. Jacquard loads a slice of 256
parameters of one filter into the 256 PEs. It keeps that slice while it sweeps
every output pixel. Each cycle, one activation-buffer row carries the 256 inputs
that the slice needs for one pixel. The 256 products are summed across the array
into one output per cycle. A new filter slice is loaded only once per `P` pixels.

A reduction longer than 256 terms is cut into `NCH` chunks. The running sum of
each pixel is kept in a partial-sum memory of `PSUM_DEPTH = 512` entries, and
each later chunk adds to it. The last chunk requantises the sum and writes it out.
Unused lanes must hold zero parameters. A depthwise 3x3 layer therefore uses 9
lanes.

Each (output channel, chunk) pair takes `P + 2` cycles: two to load the slice,
then one pixel per cycle. A command takes `Cout*NCH*(P+2) + 2` cycles.
`weight_loads` counts loaded slices.

Buffer layouts (rows of 256 bytes):

- Parameter row `par_base + o*NCH + ch`.
- Input row `in_base + ch*P + p`.
- Output `O[o][p]` in row `out_base + (o/256)*P + p`, byte `o % 256`. This has
  the same shape as an input chunk.

## How much runs where

At the default sizes:

- **Cluster 1.** Parameters of 1 to 100 KB fit Pascal's 128 KB buffer.
- **Cluster 2.** Layers of up to 500 KB have to be split by output channels into
  several commands. The host refills the buffer between them.
- **Cluster 3 and fully connected layers.** Any size the 16-bit command fields
  can describe. Parameters are never stored on chip beyond the 512-byte FIFOs.
  The `B` input vectors and outputs must fit 128 KB. For example, a 1000 x 1000
  LSTM gate with 16 cells batched uses 32 KB.
- **Cluster 4.** Layers of 0.5 to 2.5 MB need 4 to 20 commands, each with the
  filters that fit in 128 KB.
- **Cluster 5.** Parameters of up to 100 KB fit in one command.

Splitting a layer into several commands is the host's job. The hardware only
guarantees that each command is self-contained.

## Where this design goes beyond, or departs from, the description it follows

These points are this design's own choices, where the source describes only what
the block does:

- The command format, every buffer layout, the DMA and stream handshakes, the
  32-bit accumulators, the shift-and-saturate requantisation, and the Q3.4
  LSTM cell with hard sigmoid and hard tanh.
- Pavlov's batch size `NACC = 16`. The source names the batch but gives no value.
- Jacquard's partial-sum memory for long reductions.
- Serial (one byte per cycle) initialisation and write-back in Pavlov, and a
  write-back cycle in Pascal that does not overlap the next reduction. These cost
  a few percent of throughput, and the source says nothing about them.
- The three accelerators sit in one module. In the described system Pascal is
  next to the host and the other two are in the DRAM's logic layer. Placement has
  no logic function here.
- The clock frequency is not given. The peak rates 2 TFLOP/s, 128 GFLOP/s and
  512 GFLOP/s correspond to the PE counts at about 1 GHz.
- No scheduler, DRAM or host is modelled in `rtl/`. The layer-to-accelerator
  mapping is a host decision that reaches the hardware only as `cmd.target`.

## Files

`rtl/`:

- `mensa_pkg.sv`: types, `cmd_t`, `requant()`.
- `mac_pe.sv`: PE with an `NACC`-entry partial-sum register file.
- `buffer_ram.sv`: byte-enabled buffer with a registered read.
- `param_fifo.sv`: Pavlov's per-PE parameter FIFO.
- `lstm_cell_unit.sv`: the element-wise LSTM update.
- `pascal_accel.sv`, `pavlov_accel.sv`, `jacquard_accel.sv`: the three
  accelerators.
- `mensa_top.sv`: the system top.

Each file begins with a description of its interface and timing.

`tb/`: one self-checking testbench per module. Each compares the outputs with a
reference computed in the testbench, checks the cycle counts stated above, has a
watchdog, and prints `TB_RESULT checks=N failures=M`.

- `tb_mensa_top.sv` runs a three-layer network through the system with small
  arrays (2x2 PEs):
  1. A Pascal 1x1 convolution with ReLU.
  2. A Jacquard 4-tap strided convolution with a two-chunk reduction and more
     filters than lanes.
  3. A four-step Pavlov LSTM: a batched input MVM, then per-step hidden MVMs
     with initialised accumulators and cell updates.

  Activations move between the layers through the DMA ports, as they would
  through DRAM. The parameter stream arrives with random gaps and the command
  port sees back-pressure. The testbench counts each of these mechanisms and
  fails if one never happened.
- `tb_mensa_top_full.sv` runs the same network with the top at its default
  sizes:
  - Pascal: 1024 pixels to 128 channels.
  - Jacquard: a 512-term reduction, with 256 filters filling its 128 KB
    parameter buffer exactly.
  - Pavlov: an LSTM with H = 64 and 256 inputs.

  It needs about 40 s to build and a few seconds to run.

Simulating with Verilator 5, for example the system test:

```
verilator --binary --timing -Irtl --top-module tb_mensa_top \
  rtl/mensa_pkg.sv $(ls rtl/*.sv | grep -v mensa_pkg) tb/tb_mensa_top.sv -o sim
./obj_dir/sim
```

The package goes first and is listed only once. The testbenches read no files and
need no plusargs.
