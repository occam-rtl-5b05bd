# Occam stage: a filter-resident, row-plane-streaming CNN accelerator

A convolutional network spends most of its memory traffic on three things:
refetching filters for every image, writing each layer's output map off chip
and reading it back as the next layer's input. Occam avoids both. It holds only
what the next output row still depends on, and it keeps filters on chip.

* **Row-plane tiles.** Every input cell of a convolution is reused along both
  image dimensions. Capturing all of that reuse with the least storage means
  holding full rows (row-planes: one row x all channels), not square tiles.
* **Dependence closure.** To produce one row-plane of a network's final output,
  each layer needs a few row-planes of its own input: k rows for the last
  layer, more for each earlier layer, growing with the kernel size. This set is
  the dependence closure. Keeping exactly the closure on chip, and replacing the
  oldest rows as computation moves down the image, means intermediate maps
  never leave the chip.
* **Partitions on separate chips.** A whole network's filters and closure do
  not fit on one chip. The network is therefore cut into runs of consecutive
  layers (partitions). The cut points are chosen offline by dynamic programming
  to minimise the traffic at the boundaries. Each partition runs on its own
  chip, which keeps that partition's filters resident for every image. The
  chips form a pipeline.
* **Staggered asynchronous pipelining (STAP).** If one stage is slower than the
  others, it is replicated, and whole mini-batches are dealt to the replicas in
  turn: mini-batch i goes to replica i mod R. Throughput rises without changing
  the partitioning.

This repository gives synthesizable SystemVerilog for **one pipeline stage**,
meaning one chip. It is organised after the FPGA implementation of the idea: a
single cluster of 64 multiply-accumulate lanes. Each lane holds a 128-element
filter subvector, and each 128-element input subvector is broadcast to all
lanes. Both subvectors are double-buffered, and a host processor issues
subvector-fetch and subvector-multiply commands. The offline partitioner, the
host processor, the SDRAM and the chip-to-chip link are not part of the RTL.

## Block diagram

```
                 host commands (cmd_t, valid/ready)
                              |
                        +-----v------+         ext_req/ext_rsp (off-chip reads)
                        | occam_ctrl |<-------------------+
                        +--+--+--+---+                    |
         LOAD_W/BIAS       |  |  |  DMA_FRAM / DMA_CB  +--+------+
        +------------------+  |  +-------------------->| ext_dma |
        |                     |                        +--+---+--+
  +-----v------+   LOAD_X     |            filter words   |   | input words
  | filter_ram |        +-----v----------+ <--------------+   |
  | 64 banks   |        | closure_buffer | <--------------+---+ (shared write
  +-----+------+        | per-layer ring |                |     port, results
        | 64 elems/cyc  +-----+----------+                |     have priority)
        v                     | 128-elem word             |
  +-----------------------------------------+             |
  | lane_cluster: 64 x mac_lane             |             |
  |  filter subvector x2 per lane           |             |
  |  input subvector x2, broadcast 1 elem/cyc             |
  +-------------------+---------------------+             |
                      | 64 accumulators                   |
                 +----v----+   on chip (next layer) ------+
                 | post_op |-----------------------------+
                 +----+----+   off chip
                      v
                 +------------+  link_valid[0] -> replica 0 of next stage
                 | stap_steer |  link_valid[1] -> replica 1 of next stage
                 +------------+
```

## How a stage computes a layer

The cluster computes **one output pixel at a time, 64 output channels at once**.
Lane *l* holds filters of output channel *l*. The dot product of one output
cell runs over a k x k x m window. It is split into subvectors of 128 elements,
each holding 128 input channels at one (dy, dx) position of the window. A 3x3
layer with 128 input channels thus takes 9 subvectors per output pixel. With
more than 64 output channels, the host makes several passes with different
filters.

For each subvector the host issues three commands:

1. `LOAD_W fram_addr`: every lane's bank of the filter RAM streams 128
   elements into that lane's free filter-subvector buffer. This takes one
   element per lane per cycle, 129 cycles.
2. `LOAD_X pos`: one word of the closure buffer is copied into the free
   input-subvector buffer. The word holds 128 channels of one pixel (2 cycles).
3. `MAC first last ...`: 128 steps, one per cycle. In each step every lane
   multiplies its filter element by the broadcast input element and
   accumulates. `first` restarts the accumulators from the lanes' biases, which
   a previous `LOAD_BIAS` loaded. `last` ends the output cell. The
   accumulators then pass through `post_op`, which applies an arithmetic right
   shift, optional ReLU and saturation to 18 bits. The 64 results either go
   back into the closure buffer, into half of a word of the next layer's ring,
   or leave the chip through `stap_steer`.

Each buffer has two banks, so the loads for subvector j+1 run while subvector j
is multiplied. The controller tracks each bank as full or empty. In the
end-to-end test at full size the lanes are busy on 90.9% of the cycles of the
compute phase; the remainder is the drain at the end of each output pixel.

## The closure buffer: per-layer rings of row-planes

Each layer of the partition owns a region of the closure buffer described by
`layer_desc_t {base, rows, width, chunks}`. Absolute row r of that layer's map
lives in slot `r mod rows`, so the region is a ring of `rows` row-planes:

```
word address = base + ((row mod rows) * width + col) * chunks + chunk
```

A word is 128 consecutive channels (a *chunk*) of one pixel. For a chain of
stride-1 k x k layers, a final-output row needs k rows of the last layer's
input, 2k-1 of the layer before, and so on. These are the `rows` values the
host programs, plus one row where it wants to prefetch the next input row while
computing. The host walks down the image. When the last input row that a
layer's next output row needs has arrived, it computes that output row into the
next layer's ring, overwriting the oldest row, which nothing needs any more.
Only the partition's first input, read through the DMA, and its last output,
sent on the link, cross the chip boundary.

The end-to-end testbench does exactly this for a two-layer partition: input
rings of 4 row-planes, a middle ring of 3, and two images through the same
resident filters.

## Command set

`cmd_t` (in `occam_pkg`) carries an opcode and fields; unused fields are ignored.

| opcode        | effect | waits for |
|---------------|--------|-----------|
| `SET_LAYER`   | write the descriptor of layer `pos.layer` | all engines idle |
| `SET_MB`      | set the mini-batch id `mb` for later results and the replica count `nrep` | nothing |
| `DMA_FRAM`    | copy `len` elements from `ext_addr` into filter bank `lane` at `fram_addr` | DMA idle, filter loader idle |
| `DMA_CB`      | read `len` (<= 128) elements from `ext_addr`, zero-pad, write one word at `pos` | DMA idle |
| `LOAD_W`      | filter RAM `fram_addr..+127` of every bank -> lanes' free filter bank | filter loader idle, free bank, DMA not writing filters |
| `LOAD_BIAS`   | filter RAM `fram_addr` of every bank -> lanes' bias | filter loader idle, DMA not writing filters |
| `LOAD_X`      | closure word `pos` -> free input bank | free bank; no pending result or DMA word for `pos` |
| `MAC`         | 128 steps on the oldest full bank pair; `first`, `last`, `dst_onchip`, `dst`, `dst_half`, `relu`, `shift` | MAC engine idle (a `last` MAC holds it until its result is out), both banks full, bias written |

Commands issue in order, at most one per cycle. Each `MAC` must be preceded by
exactly one `LOAD_W` and one `LOAD_X`, because the banks pair up in order.
`LOAD_BIAS` for the next output cell may be issued any time after the previous
cell's first `MAC`.

Hazard handling is precise, not conservative. A `LOAD_X` waits only if it
reads the very word that a pending result or the DMA is about to write. The
closure buffer has one write port: a MAC result takes it, and a DMA word waits
a cycle.

## Interfaces and timing of the top, `occam_chip`

* `cmd_valid / cmd_ready / cmd`: host command stream. A command is taken at a
  rising edge when both are high.
* `ext_req_valid / ext_req_ready / ext_req_addr`: one element address per
  beat. `ext_rsp_valid / ext_rsp_data` return elements in order, any number of
  cycles later; the stage always accepts them.
* `link_valid[r] / link_ready[r] / link_data / link_mb`: one stream per
  downstream replica. A beat is the 64 results of one output pixel and its
  mini-batch id. It is offered on replica `mb mod nrep` only.
* `events`: one-cycle pulses for MAC steps, load/MAC overlap, the three kinds
  of stall, write-port conflicts, link backpressure and results.
* `busy`: some engine is still working.

Latencies: `LOAD_W` 129 cycles; `LOAD_X` 2; `MAC` 128, plus 3 (drain and
post-processing) and the output handshake when `last` is set. Reset is
asynchronous and active low. It clears control state and descriptors, not the
memories.

## Sizes

| parameter | default | origin |
|-----------|---------|--------|
| `LANES` | 64 | FPGA cluster of the source design |
| `VEC_LEN` | 128 | filter subvector length of the source design |
| `DATA_W` | 18 | width of the FPGA's embedded multipliers |
| `ACC_W` | 48 | own choice |
| `FILTER_DEPTH` | 3072 per lane (196,608 elements, 442 KB) | own choice, within the FPGA's 820 KB |
| `CB_WORDS` | 1024 words of 128 x 18 bits (295 KB) | own choice |
| `MAX_LAYERS` | 8 | own choice |
| `MAX_REP` | 2 | the replication shown for STAP |

Memories are plain arrays: banked single-write, single-read RAMs with
registered reads.

## How far to trust it, and where it departs

Simulated, not synthesised for a device. Every block has a self-checking
testbench. The top-level testbench runs the stage at full default size. It
checks every output cell of two images through a two-layer partition against a
reference convolution, and it confirms that every stall, overlap, conflict,
backpressure and replica path occurred.

Choices made here because the source leaves them open:

* Storage is 18 bits per element, so one word holds 128 channels of one pixel.
  Layers with few channels, such as an RGB input, waste most of a word. A
  denser layout would need a gather unit.
* The command encoding, the in-order issue and the hazard rules.
* Requantisation by shift and saturate; bias preloaded into the accumulator.
* A one-element-wide off-chip read bus.
* Plain valid/ready streams in place of the chip-to-chip link.

Not built:

* Pooling and batch normalisation. They are applied as local operations in the
  source design, but their hardware is not described.
* Strided and padded convolutions. The controller supports them through the
  addresses the host issues; no special hardware is needed, and none is tested.
* Residual inputs.
* The merging side of STAP: a stage that receives from replicated upstream
  stages reads its input through the DMA.

At its default sizes one stage holds about 0.33 M elements. The partitions
evaluated for the source design (3 MB per chip, INT8) and even its thinned FPGA
networks need more per stage. Running them means cutting the network into more,
smaller partitions, which the offline partitioner would do given this capacity.

## Files and simulation

`rtl/`: `occam_pkg` (types, command, events), `mac_lane`, `lane_cluster`,
`filter_ram`, `closure_buffer`, `post_op`, `ext_dma`, `occam_ctrl`,
`stap_steer`, `occam_chip` (top).
`tb/`: one `tb_<module>.sv` per module; `ext_mem_model.sv` is a behavioural
off-chip memory used by the DMA and top-level tests.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/occam_pkg.sv \
          tb/tb_occam_chip.sv --top-module tb_occam_chip -o sim
./obj_dir/sim
```

The full-size top-level test builds in a few minutes and runs in about a
second. The block tests override sizes downward (for example 4 lanes of
8-element subvectors) to stay small.
