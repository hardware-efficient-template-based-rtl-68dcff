# A tiled CNN accelerator with one shared vector compute unit

This RTL implements the accelerator template described in *Hardware-Efficient
Template-Based Deep CNNs Accelerator Design* (Alhussain and Lin). The idea is
to run both kinds of expensive CNN layers, convolution and fully connected
(FC), on one array of multipliers. Loop tiling turns each layer into a series
of vector products. In every cycle a vector of μ input neurons is multiplied by
a μ×τ block of weights, and the products are added into τ output neurons. A
host processor splits each layer into tiles that fit the on-chip buffers and
issues one command per tile. The accelerator then loads the tile from DRAM,
computes it and writes the result back. Double-buffered (ping-pong) memories let
these three steps of successive tiles overlap. All data is 16-bit fixed point
in Q2.14 format: 2 integer bits and 14 fraction bits.

The default build is the smallest configuration the authors report, made for
the Ultra96 board: μ = 12, τ = 24, so 288 multiply-accumulates per cycle. The
design is written in synthesizable SystemVerilog. It is not the authors' code:
they generated their design with high-level synthesis and did not publish it.
Where their description stops, the choices made here are listed in
[Departures and own choices](#departures-and-own-choices).

## Block structure

```
             +---------+     +-----------------+     +--------------------+     +-----------------+     +--------------+
 DRAM <----> | data    | <-> |                 | <-> | input  buf conv    | --> |                 | --> |              |
 (AXI4)      | port    |     |  mem_           |     | weight buf conv    | --> |  cu_            |     | compute_unit |
             +---------+     |  interconnect   |     | output buf conv    | <-> |  interconnect   | <-- |  mu x tau    |
 DRAM -----> | weight  | --> |                 | --> | input  buf FC      | --> |                 |     |              |
 (AXI4)      | port    |     |                 |     | weight buf FC      | --> |                 |     |              |
             +---------+     +-----------------+     | output buf FC      | <-> |                 |     +--------------+
                                                     +--------------------+     +-----------------+
                       tile_scheduler: commands from the host, bank bookkeeping, loop counters
```

| Module | Role |
|---|---|
| `cnn_accel_top` | wires everything together; plain command port and two AXI4-style master ports |
| `tile_scheduler` | takes tile commands; runs the load, compute and store engines; generates the loop nests |
| `data_port` | read/write burst master for feature maps (its read half is a `burst_reader`) |
| `burst_reader` | read-only burst master; it is the weight port |
| `mem_interconnect` | turns port streams into (row, lane) buffer writes; streams output buffers to the data port |
| `pingpong_buffer` | two-bank buffer with an element-wide DRAM side and a row-wide compute side; six instances |
| `cu_interconnect` | selects the conv or FC buffers for the compute unit and routes results back |
| `compute_unit` | μ×τ multipliers, τ adder trees and accumulators, Q2.14 output |
| `cnn_pkg` | shared constants, the `tile_cmd_t` command struct, saturation |

## How a layer is mapped

### Convolution

One tile takes an input patch of `in_rows × in_cols` pixels with μ input
channels. Its weights are `k × k × μ × τ` and it produces
`out_rows × out_cols` pixels with τ output channels, where
`out = (in − k)/stride + 1` on each side. The compute engine runs this loop
nest, one iteration per clock cycle:

```
for r in 0..out_rows-1, c in 0..out_cols-1:        // output pixel
  for i in 0..k-1, j in 0..k-1:                    // kernel position
    x[0..μ-1]        = input_buffer[(s*r+i)*in_cols + (s*c+j)]
    W[0..μ-1][0..τ-1] = weight_buffer[i*k + j]
    acc[co] += Σci x[ci] * W[ci][co]   for all τ output channels at once
  output_buffer[r*out_cols + c] = acc   (τ values)
```

So one output pixel, across τ channels, takes k² cycles. Each cycle does μ·τ
MACs, and the parallelism is spread over the input and output channels. A layer
with more than μ input channels becomes several tiles that cover the same
output pixels. The first tile starts from zero. Each later tile is issued with
`acc_in = 1` and adds its sums to the partial sums already in the output
buffer. The last tile is issued with `store = 1`, which writes the result back
to DRAM. Layers with more than τ output channels, or with larger images, are
simply more tiles.

### Fully connected

An FC tile has `n_in_chunks·μ ≤ λ` inputs and `n_out_chunks·τ ≤ Ω` outputs. It
is cut into μ×τ blocks of weights:

```
for o in 0..n_out_chunks-1:            // τ outputs at a time
  for ch in 0..n_in_chunks-1:          // μ inputs at a time
    acc[co] += Σci in_buffer[ch][ci] * w_buffer[o*n_in_chunks + ch][ci][co]
  out_buffer[o] = acc
```

An FC layer with more than λ inputs is chained with `acc_in` in the same way
as a convolution. An FC layer with more than Ω outputs is several tiles.

### What the host does

The host keeps the data in DRAM in the tile layout below and issues the tiles.
It also pads channel counts up to multiples of μ and τ with zeros. Pooling,
ReLU, normalisation and softmax are its job too: the accelerator only computes
the sums, with no bias and no activation.

| DRAM region | Order of 16-bit elements |
|---|---|
| conv input tile | pixel by pixel (row-major), μ channels per pixel |
| conv weight tile | kernel position (i, j) row-major; within it input channel ci, then output channel co |
| conv output tile | pixel by pixel (row-major), τ channels per pixel |
| FC input tile | neuron order (μ per buffer row) |
| FC weight tile | block (o, ch) with o outer; within a block ci, then co |
| FC output tile | neuron order (τ per buffer row) |

### Tile command (`cnn_pkg::tile_cmd_t`)

| Field | Meaning |
|---|---|
| `is_fc` | 0 = convolution tile, 1 = FC tile |
| `acc_in` | add to the partial sums in the current output bank instead of starting from zero |
| `store` | write the output bank to DRAM after this tile and switch to the other output bank |
| `ifm_addr`, `w_addr`, `ofm_addr` | byte addresses of the three DRAM regions (2-byte aligned) |
| `in_rows`, `in_cols`, `out_rows`, `out_cols`, `k`, `stride` | convolution geometry; the host supplies the output size |
| `n_in_chunks`, `n_out_chunks` | FC size in units of μ inputs and τ outputs |

Commands are accepted with a valid/ready handshake. `idle` goes high when every
accepted tile has been computed and stored.

## Ping-pong buffers and the three engines

The scheduler contains three small state machines that run at the same time:

* **Load** waits for a free input bank `lb`. It then starts two transfers in
  parallel: the input tile through the data port and the weight tile through
  the weight port. The memory-side interconnect writes each arriving element
  into bank `lb` of the conv or FC buffer, at (row, lane) positions counted
  from the start of the stream. When both transfers are done, the bank is
  marked full and `lb` flips.
* **Compute** waits until input bank `cb` is full and output bank `ob` is
  free. It then runs the loop nest above. At the end it frees `cb` and flips
  it. If the tile has `store` set, it also hands `ob` to the store engine and
  flips `ob`.
* **Store** waits for a full output bank `sb`. It streams that bank to the
  data port's write channel, frees the bank when the last write response
  arrives, and flips `sb`.

This scheme allows three things at once: loading tile n+1, computing tile n and
storing the output of an earlier tile. An assertion in every buffer checks that
its two sides never touch the same bank in the same cycle.

Pipeline of the compute path: the scheduler issues the read addresses. The
buffers return the rows one cycle later, and the compute unit adds them into
its accumulators in the same cycle. On the last beat of a sum it registers the
saturated result, which is written into the output buffer on the following
cycle. A partial sum for `acc_in` is read on the first beat of each output.
Compute time per tile is exactly `beats + 3` cycles: one beat per cycle plus a
three-cycle drain.

## Arithmetic

Inputs and weights are signed Q2.14. The products are exact (Q4.28), and a
48-bit accumulator adds them with no overflow. This holds for any tile the
buffers can hold, even with a partial sum added. The result is
`sat16(acc >>> 14)`: an arithmetic shift that truncates towards −∞, then
saturation to [−2, 2) in Q2.14. A partial sum from an earlier tile is stored
in this rounded 16-bit form and shifted back up by 14 before it is added. So a
layer split into several input-channel tiles rounds once per tile, not once per
layer.

## External interfaces

Both DRAM ports are cut-down AXI4 masters: address, data and response channels
with valid/ready handshakes, INCR bursts only, no IDs, and a 16-bit data bus
carrying one element per beat. A transfer is split into bursts of at most 16
beats that never cross a 4 KiB boundary, and only one burst is in flight per
channel. Any response other than OKAY sets `bus_err`. The weight port only
reads. The data port reads input tiles and writes output tiles, and its read
and write halves work independently.

The host side is a plain `tile_cmd_t` port with valid/ready. A Zynq system would
put a register block (for example AXI-Lite) and a small command queue in front
of it. That part is not included here.

Reset is asynchronous and active-low for all control state. The buffer contents
are not reset.

## Parameters and sizes

| Parameter | Default | Origin |
|---|---|---|
| `MU` (μ) | 12 | published Ultra96 configuration (12 × 24) |
| `TAU` (τ) | 24 | published Ultra96 configuration |
| data format | Q2.14 | published |
| `TROW`, `TCOL` (tile size T, C) | 14, 14 | own choice: fits an 11×11 kernel with stride up to 3 |
| `KMAX` | 11 | own choice: largest AlexNet kernel |
| `LAMBDA` (λ) | 576 = 48·μ | own choice |
| `OMEGA` (Ω) | 96 = 4·τ | own choice |

Buffer shapes per bank, in rows × elements: input conv 196 × 12, weight conv
121 × 288, output conv 196 × 24, input FC 48 × 12, weight FC 192 × 288, output
FC 4 × 24. That comes to about 3.1 Mbit over both banks. λ must be a multiple
of μ and Ω a multiple of τ. The authors also report a 20 × 30 configuration
(ZCU104) and a 20 × 55 configuration (ZCU102). Both come from overriding `MU`
and `TAU`, with `LAMBDA` and `OMEGA` changed to multiples of the new values.
Both have been simulated with λ = 560 and Ω = 90 or 110 (see Simulation).

The default build can run AlexNet, VGG16 and LeNet-5 layer by layer, with host
tiling and zero padding. Its kernels are at most 11×11 and its strides at most 7.

## Departures and own choices

* **Tile sizes.** The authors name the tile factors T, C, λ and Ω but give no
  values. The ones here are picked to fit the published networks.
* **Input patch vs output tile.** The published input buffer is T × C × μ, the
  same spatial size as the output buffer. Here the input buffer holds the
  whole input patch, including the kernel halo, so the output tile is smaller
  than T × C.
* **Buffer partitioning.** The text says the input and weight buffers are
  partitioned along τ. But the input buffer holds μ channels, so here the input
  rows are μ wide and the weight rows μ·τ wide.
* **Loop order inside a conv tile.** The authors describe sweeping every
  pixel of the tile, from (0, 0) to the last one, and repeating that sweep for
  each of the k×k kernel positions. Here the kernel positions are the inner
  loop instead. The beat count is the same (`out_pixels·k²`) and so are the
  sums. But each output pixel is finished in the accumulator registers, so the
  output buffer is written once per pixel rather than read and rewritten k²
  times.
* **Interconnects and scheduler.** These are only named in the source. The
  (row, lane) addressing, the bank flags, the command format and the
  `acc_in`/`store` mechanism for input-channel tiling are this design's own.
* **Bus width.** A 16-bit port moves one element per cycle. Loading a
  convolution weight tile therefore takes 288·k² cycles, against
  `out_pixels·k²` cycles of compute. With 14×14 patches the accelerator is
  load-bound, and the ping-pong overlap hides compute behind loading, not the
  other way round. The published throughput (51 GOP/s at 169 MHz on Ultra96,
  against a peak of 2·288·169 MHz ≈ 97 GOP/s) needs a much wider port. It would
  also need weight reuse across tiles, which the authors do not describe.
  Widening `DW` on the ports, with a matching lane counter, is the natural
  extension.
* **Rounding.** Truncation and saturation are this design's choices.
* **Not included:** the host processor, the DRAM and its controller, and the
  host's register interface.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
`tb/axi_mem_model.sv` is a behavioural DRAM with two AXI-style ports and random
handshake stalls.

| Testbench | What it shows |
|---|---|
| `tb_compute_unit` | random sums of 1–9 beats with bubbles, with and without partial sums, saturation; result exactly one cycle after the last beat |
| `tb_pingpong_buffer` | element writes and row reads on opposite banks in the same cycles; row writes and element reads; read data held |
| `tb_burst_reader` | lengths 0–300 at aligned, odd and 4 KiB-straddling addresses; burst rules; data against memory |
| `tb_data_port` | writes under random source and sink stalls; `w_last` placement; concurrent read; untouched neighbours |
| `tb_mem_interconnect` | (row, lane) addressing for conv and FC loads; lossless stores under back-pressure |
| `tb_cu_interconnect` | operand selection and write-enable routing |
| `tb_tile_scheduler` | every compute beat's addresses and flags against loop nests written out in the test; transfer sizes; bank alternation; compute time |
| `tb_cnn_accel_top` | whole design at default sizes: seven tiles (conv k = 3, 5, 11, strides 1–3, FC up to the full λ and Ω, chained partial sums), checked word by word against a reference model. Also requires that loading overlaps computing, storing overlaps computing, conv↔FC switches, partial-sum accumulation, saturation, DRAM stalls and 4 KiB-split bursts each happen at least once |
| `tb_cnn_workloads` | slices of the target networks on the default design, with the host's tiling, padding, ReLU, 2x2 max pooling and flattening done by the testbench: AlexNet conv1 (11×11, stride 4, 3 channels padded to 12), an AlexNet-style FC layer of 1152 → 120 (two λ tiles chained, two Ω tiles), VGG16 conv1_2 (3×3, 64 input channels as six chained μ tiles, 12×12 outputs), and LeNet-5 C3 → pool → F5 → F6 → F7. Every stored output against a reference; padded outputs zero. Prints cycles per layer: with random DRAM stalls the AlexNet conv1 tile takes about 54k cycles for 121 compute beats, which shows how load-bound the 16-bit bus makes the design |
| `tb_cnn_table1_configs` | the accelerator built twice more, with a 20×30 and a 20×55 compute unit (λ = 560, Ω = 90 and 110), through the shared harness `tb/cnn_cfg_harness.sv`: a 3×3 conv over two chained μ tiles, a 5×5 stride-2 conv and an FC layer over two full λ tiles into a full Ω tile, each against a reference |

To run one with Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/cnn_pkg.sv $(ls rtl/*.sv | grep -v cnn_pkg) \
    tb/axi_mem_model.sv tb/tb_cnn_accel_top.sv \
    --top-module tb_cnn_accel_top -Mdir obj && ./obj/Vtb_cnn_accel_top
```

The end-to-end test at the default sizes builds in about 15 s and runs in under
a second.
`tb_cnn_workloads` is built the same way with its own name in place of
`tb_cnn_accel_top`, and runs in about a second. `tb_cnn_table1_configs` also
needs `tb/cnn_cfg_harness.sv` before it in the file list. For a unit testbench, list
`rtl/cnn_pkg.sv`, the unit's own file (plus `rtl/burst_reader.sv` for
`tb_data_port`) and `tb/axi_mem_model.sv` where the testbench uses the DRAM
model. Every testbench ends by printing `TB_RESULT checks=N failures=M`.
