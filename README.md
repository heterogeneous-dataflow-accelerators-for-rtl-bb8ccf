# Maelstrom: a two-dataflow accelerator for running several DNNs at once

AR/VR devices and data-centre servers increasingly run several neural
networks side by side: a classifier, a segmentation network, a depth
estimator, a hand tracker. Their layers differ a lot in shape. Early CONV
layers of a segmentation network have few channels and huge activation
planes. Late classification layers and fully-connected layers have thousands
of channels and tiny planes. Depth-wise layers have no cross-channel
reduction at all. No single dataflow suits all of them:

* a **weight-stationary, channel-parallel** array (NVDLA style) is fully used
  when there are many input and output channels, and idles on shallow or
  depth-wise layers;
* an **output-stationary, pixel-parallel** array (Shi-diannao style) is fully
  used when output planes are large, and idles on 1x1-spatial FC layers.

Maelstrom is a *heterogeneous dataflow accelerator*. It does not build one
flexible array. It splits a fixed budget of PEs and on-chip bandwidth
unevenly between one sub-accelerator of each style. An offline schedule
sends every layer to the sub-accelerator that suits it and runs layers of
*different* networks on the two at the same time. Both sub-accelerators share
one global buffer. Each reaches the buffer through its own dedicated slice of
the on-chip network, so neither ever waits for the other. A DRAM engine
streams weights and activations in (and results out) while they compute.

The RTL here is the edge-class configuration:

| part | size |
|---|---|
| NVDLA-style sub-accelerator | 128 PEs (16 output x 8 input channels), 4 byte lanes = 4 GB/s at 1 GHz |
| Shi-diannao-style sub-accelerator | 896 PEs (28 output rows x 32 output columns), 12 byte lanes = 12 GB/s |
| global buffer | 4 MiB |
| DRAM engine | 16 byte lanes (16-byte beats) |
| schedule queues | 1024 commands per unit, 4096 command ids |

The 128/896 PE and 4/12 GB/s split and the 4 MiB buffer are the published
edge design point for an AR/VR mix of ResNet50, UNet and MobileNetV2. The
array shapes (16x8, 28x32), the DRAM lane count and the queue sizes are this
implementation's own choices. Every size is a parameter of `maelstrom_top`.

## Why two dataflows pay off, in cycles

Layer cycle counts from the RTL (both units use the default sizes and lanes):

| layer | NVDLA-style | Shi-diannao-style |
|---|---|---|
| depth-wise 3x3, 10 channels, 11x11 input, stride 2 | 5293 | 1871 |
| fully-connected 40 -> 18 | 375 | 3655 |

The NVDLA-style unit can only use its diagonal (8 of 128 PEs) on a depth-wise
layer. The Shi-diannao-style unit spends a full block of 896 PEs on a single
output pixel of an FC layer. The schedule avoids both cases by putting each
layer where it runs well, and it keeps both units busy with different
networks.

## Data types and the shared tensor layout

* Operands are signed 8-bit and sums are 32-bit. Each layer writes 8-bit
  outputs: the sum is shifted right arithmetically by the layer's `shift`
  field and saturated to [-128, 127] (`hda_pkg::requant`). There is no
  activation function.
* Both sub-accelerators use one layout, so a tensor produced by one can be
  consumed by the other without reshuffling:
  activations `[C][Y][X]`, weights `[K][C][R][S]` (depth-wise: `[C][R][S]`),
  outputs `[K][OY][OX]`, all byte-addressed in the global buffer.
* A layer is a `layer_desc_t` with these fields: `op` (CONV or DWCONV), `k`,
  `c`, `iy`, `ix`, `oy`, `ox`, `r`, `s`, `stride`, `pad`, the three base
  addresses and `shift`. Point-wise convolution is CONV with `r = s = 1`. A
  fully-connected layer is CONV with `iy = ix = r = s = 1` and `c` inputs.
  The FC input can be the previous layer's `[K][OY][OX]` output taken as a
  flat vector.

## The global buffer and its partitioned network (`global_buffer`)

The on-chip network is *hard-partitioned*. Each client owns a fixed set of
byte lanes, and each lane is a read/write port of the buffer memory. With
no shared wires there is no arbiter and no contention. The bandwidth split
between the sub-accelerators is fixed by wiring, just like the PE split.
Lanes 0-15 belong to the DRAM engine, 16-19 to the NVDLA-style unit and
20-31 to the Shi-diannao-style unit. A lane request `{en, we, addr, wdata}`
returns read data one cycle later. A write lands at the clock edge. The
schedule must never let two lanes write the same byte in one cycle, and
an assertion checks this.

The memory is one flat 4 MiB array with 32 ports. This is a behavioural view
of what would be a banked SRAM in silicon. Banking, and the bank conflicts it
would bring, are not modelled.

## NVDLA-style sub-accelerator (`nvdla_subacc`, `nvdla_pe_array`)

The array holds a 16x8 tile of weights, one per PE (weight stationary). An
8-channel input pixel is broadcast along the rows. Each of the 16 rows sums
its 8 products in an adder tree, which is the spatial reduction across input
channels. The array has two weight banks: the next tile is written into the
shadow bank and becomes active on `w_swap`.

The controller's loop nest is:

```
for k-tile (16 output channels; depth-wise: 8 channels on the diagonal)
  for output row oy
    for c-tile (8 input channels), r, s        -- one "step"
      load the 16x8 weight tile over 4 lanes   (WLOAD, WWAIT)
      swap weight banks                        (SWAP)
      for ox: read 8 input bytes, MAC          (STREAM)
      accumulate the 16-wide result into the row buffer psum[ox][16]
    drain the pipeline (3 cycles), write 16 x OX outputs (WRITE)
```

The row partial-sum buffer has `MAX_OX = 1024` entries, so outputs can be at
most 1024 wide. Padding positions are fed as zeros without a read. With 4
lanes, a layer takes

```
ceil(K/kt) * OY * ( steps * (ceil(128/4) + 2 + OX * ceil(8/4)) + 3 + ceil(16*OX/4) ) + 1
```

cycles, where `kt` is 16 (8 for depth-wise) and `steps` is
`ceil(C/8)*R*S` (`R*S` for depth-wise). Both testbenches check this exactly.
The streaming phase is bound by lanes: 8 input bytes per pixel over 4 lanes
is 2 cycles per pixel. This is how the narrow bandwidth slice shows up in
the timing.

## Shi-diannao-style sub-accelerator (`shi_subacc`, `shi_pe_array`)

Each of the 28x32 PEs owns one output pixel of the current output block and
keeps its 32-bit sum in place (output stationary). Each step broadcasts one
weight to all PEs, and every PE multiplies it with the input value it holds.
The loop nest:

```
for k, for block row oy0 (28 rows), for block column ox0 (32 columns)
  for c (only c = k for depth-wise), r, s
    load the weight and the block's inputs (LOAD, LWAIT), MAC
  write the block's outputs (WRITE)
```

**Convolutional reuse** is the subtle part. For stride 1, moving from filter
column `s` to `s+1` needs the same inputs shifted by one pixel. Each PE
therefore takes its right neighbour's input, and only one new column of up to
28 bytes enters from the right. This costs 3 lane cycles instead of 75 for a
full block. A strided layer, and the first column of every `(c, r)`,
reload the whole block. Rows of a block that fall below the output plane are
not fetched. Per block and output channel the cost is

```
nc * R * (full + (S-1) * part) + ceil(rows*32/12)
full = ceil((1 + rows*32)/12) + 2,  part = ceil((1 + rows)/12) + 2 (stride 1) or full
```

Here `nc` is C (1 for depth-wise) and `rows` is the number of block rows inside
the plane. The done pulse adds one cycle at the end.

## The DRAM engine (`dram_dma`)

One command copies `len` bytes between a DRAM byte address and a buffer byte
address, in either direction. On the DRAM side, reads are valid/ready
requests with in-order response beats, and several may be outstanding.
Writes are valid/ready beats with a byte strobe. Loads write each arriving
16-byte beat to the buffer in the same cycle. Stores take three cycles per
beat (read lanes, capture, write handshake). A transfer that ends mid-beat
touches no byte beyond `len`.

Prefetch and double buffering need no extra hardware. The engine has its own
command queue, so the next layer's weights and input tiles load into a
second buffer region while the current layer computes. Choosing the regions
is the schedule's job.

## Running a schedule (`layer_dispatcher`)

The schedule is computed offline: the PE/bandwidth partition, which unit runs
each layer, their order, and the transfers that feed them. The host writes it
as three in-order queues: DRAM engine, NVDLA-style and Shi-diannao-style. A
`cmd_t` carries an id, up to two dependence ids, and a layer or transfer
descriptor. After `go`, each unit starts its head command as soon as the unit
is free and both dependences have completed. Completions are recorded in a
scoreboard with one bit per id. In practice this means:

* layers of different networks run on both sub-accelerators at once;
* a layer starts as soon as its input layer and its weight load have
  finished, even if the producer ran on the other unit;
* a store waits for the layer that produced its data.

The queues are circular, so the host can keep writing while they drain. A
cycle in which a unit is free but its head command still waits for a
dependence is counted as a *dependence stall*. `clear` empties the queues
and the scoreboard. A unit can start a new command two cycles after its
previous one finished.

## Top level (`maelstrom_top`)

The top instantiates the dispatcher, the global buffer with its 32 lanes, the
DRAM engine and both sub-accelerators. DRAM is external, on the `dram_*`
ports. The host side is `clear`, `cmd_wr_en/cmd_wr_unit/cmd_wr`, `go` and
`all_done`. Four event counters show what the schedule achieved. They count
busy cycles per unit, cycles in which both sub-accelerators compute
together (`stat_overlap`), dependence-stall cycles per unit and completed
commands per unit.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_global_buffer`: all 32 lanes write at once, then read back from
  other lanes with one-cycle latency.
* `tb_dram_dma`: loads and stores of odd lengths and addresses under
  random DRAM back-pressure, with guard bytes past each block.
* `tb_nvdla_pe_array`, `tb_shi_pe_array`: random weights and inputs
  against a reference model. This covers bank swapping, shifting, clearing
  and accumulation.
* `tb_nvdla_subacc`, `tb_shi_subacc`: 3x3 convolutions with padding,
  stride-2 depth-wise layers, point-wise and FC layers, and planes larger
  than one block or tile. Every output byte is compared with a direct
  convolution (`tb_hda_pkg::ref_out`). A guard byte must stay untouched, and
  the cycle count must equal the formulas above.
* `tb_layer_dispatcher`: behavioural units with random latencies. It checks
  ordering, that no command starts before its dependences, overlap and stall
  counting.
* `tb_maelstrom_top` runs at the full default size. Two small networks share
  the chip. Network A is a 3x3 CONV and a stride-2 depth-wise layer on the
  Shi unit, then a point-wise layer on the NVDLA unit. Network B is a
  point-wise and a 576-input FC layer on the NVDLA unit. Seven DRAM loads and
  three stores go through a DRAM model with random back-pressure. All
  intermediate and final outputs (29,441 checks) and every layer's cycle
  count are compared with the reference. The test counts a failure for any
  mechanism that never occurred: overlap of the two units, dependence stalls
  on each unit, loads during computation, shift reuse, multi-block planes
  and DRAM back-pressure. A typical run finishes in about 29,400 cycles,
  with 6,464 cycles of the two units computing together.

To simulate with plain Verilator, list the packages first:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/hda_pkg.sv tb/tb_hda_pkg.sv rtl/*.sv tb/tb_dram_model.sv tb/tb_lane_mem.sv \
  tb/tb_maelstrom_top.sv --top-module tb_maelstrom_top
./obj_dir/Vtb_maelstrom_top
```

## What is not here, and where this departs from the published design

* **Scheduler and partition search.** These run offline as software: they
  pick the PE/bandwidth split and order the layers to minimise latency or
  energy. This hardware only *executes* their output.
* **Operators.** CONV, point-wise, depth-wise and FC are native, with any
  stride up to 7 and zero padding. Skip-connection adds can be written as a
  1x1 convolution with 0/1 weights over two tensors stored back to back.
  Concatenation is output placement. There are no native operators for
  up-scale/transposed convolution, pooling, non-linear activations or the
  LSTM cells of recurrent networks. Workloads that need them (UNet,
  DepthNet, GNMT, pooling in ResNet/MobileNet) cannot run completely.
* **Large tensors.** The 4 MiB buffer cannot hold, for example, a
  568x568x64 UNet activation. The schedule must cut such layers into
  output-channel groups and row bands, and each band then needs several
  DRAM transfers. The layer fields are 16 bits wide, and outputs are at
  most 1024 wide on the NVDLA-style unit.
* **Layout rearrangement.** There is no layout-rearrangement buffer: both
  dataflows share one layout, so none is needed.
* **Fixed choices.** The Shi-diannao-style array forwards inputs only
  leftwards, so rows are never reused vertically, and strided layers reload
  every step. The NVDLA-style unit runs depth-wise layers on its diagonal
  only. Both choices follow from the dataflows, but the exact mappings are
  this implementation's.
* **Other design points.** The published mobile and cloud partitions (for
  example 1792/2304 PEs, or 9728/6656 PEs with 224/32 GB/s) are reached
  through the parameters `NV_KP`, `NV_CP`, `NV_LANES`, `SHI_OYP`,
  `SHI_OXP`, `SHI_LANES` and `GB_BYTES`. Only the edge point has been
  simulated.
