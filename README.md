# PointNet matrix-multiplication accelerator (SystemVerilog)

This is RTL for the programmable-logic part of a LiDAR PointNet accelerator for a
Zynq-class SoC. It follows the architecture of "PointNet on FPGA for Real-Time LiDAR
Point Cloud Processing". PointNet has two kinds of operation:

- Shared MLP layers. These are 1x1 convolutions, so each is a matrix product of the
  n x Kin point features with a Kin x Kout weight matrix. Batch normalisation is folded
  in, then ReLU is applied.
- Max pooling over the points.

The accelerator runs a list of such layers, configured once by the host, on data the
DMA streams from DDR and back.

The default parameters are the paper's main configuration:

- M = 32 multipliers per process element (PE).
- N = 32 PEs.
- 8-bit weights and activations.
- Up to 4096 points per frame.

## Block diagram

```
              AXI-lite (GP port)                     DMA read stream (HP)
                    |                                       |
              +-------------+   descriptors   +--------------------------+
              | register    |---------------->| controller FSM           |--> DMA read commands
              | file        |<-- counters ----| (loops, bank swaps,      |
              +-------------+                 |  stalls, layer barrier)  |
                                              +--------------------------+
                                                    | issue + sideband
   DMA --> [input mux] --> input buffer bank 0/1 --> [bank mux] --+
     ^        ^                                                   v
     |        |       weight buffer bank 0/1 (tiles + biases) --> PE array: N PEs x
     |        |                                                   (M multipliers + adder tree)
     |        |                                                   v
     |        |       output buffer stage 1  <------------------ adder array
     |        |       (ACC_W partial sums) ---- read back -------^  (+bias on first tile)
     |        |                                                   v last input tile
     |        |                                             comparator array
     |        |                                   (rescale, ReLU / ReLU6, max pool)
     |        |                                                   v
     |        +----- feedback (next layer's input) ----- output buffer stage 2 (FIFO)
     +------------------------------------------------------------ DMA write stream
```

| File | Block |
|------|-------|
| `rtl/pnet_pkg.sv` | shared constants, descriptor type, register map, pipeline sideband |
| `rtl/pnet_pe.sv` | one PE: M multipliers and a fully pipelined adder tree |
| `rtl/pnet_pe_array.sv` | N PEs sharing one 1 x M input slice |
| `rtl/pnet_adder_array.sv` | N accumulating adders (partial sum or bias) |
| `rtl/pnet_comparator_array.sv` | rescale/saturate, ReLU/ReLU6, running max for pooling |
| `rtl/pnet_input_buffer.sv` | two input banks, write mux (DMA / feedback), read bank mux |
| `rtl/pnet_weight_buffer.sv` | two weight banks of M x N tiles plus bias memories |
| `rtl/pnet_outbuf_stage1.sv` | wide partial-sum memory |
| `rtl/pnet_outbuf_stage2.sv` | result FIFO draining to DMA or to the input buffer |
| `rtl/pnet_regfile.sv` | AXI4-lite slave: control, status, counters, descriptors |
| `rtl/pnet_ctrl_fsm.sv` | controller |
| `rtl/pnet_dma_loader.sv` | turns the DMA read stream into buffer writes |
| `rtl/pnet_accel.sv` | top level |

## Dataflow and loop order

A layer is cut into tiles:

- The input matrix X (n x Kin) becomes kt = ceil(Kin/M) words per point. Each word is
  a 1 x M slice of W-bit values.
- The weights become kt x jt tiles of M x N, with jt = ceil(Kout/N).

One *tile operation* multiplies one input word by one weight tile. Each PE takes one
column of the tile, and the PE array produces a 1 x N block of dot products. One tile
operation issues per clock, which is M x N = 1024 multiply-accumulates per cycle.

The M multipliers of a PE therefore run along the summed dimension, and the N PEs
along the output columns (the paper's Fig. 3, 5 and 6). When Kin > M the result needs
several input tiles. The controller makes the input-tile index **k the outermost
loop**. For each k it sweeps every (point, output-tile) pair in one of two orders:

- **row order** (point outer, output tile inner). A point's whole output row is
  produced before the next point. Used for ordinary layers.
- **column order** (output tile outer, point inner). One 1 x N column block runs down
  all points. Used with max pooling, because then each column tile's maximum is
  finished in one pass over the points.

Putting k outermost means consecutive operations never touch the same partial sum. A
partial sum is read back only one whole sweep after it was written, plus a short drain
of LP+4 cycles between sweeps. So the PE adder tree can be fully pipelined without
read-after-write hazards.

On the first input tile the adder array starts from the bias; on later tiles it starts
from the stage-1 word. On the last input tile the sum goes to the comparator array,
which does the following:

- Shifts the sum arithmetically right by a per-layer amount and saturates it to W bits.
- Applies ReLU or ReLU6. The ReLU6 upper bound is a per-layer value, the quantised 6.
- When pooling, keeps a running maximum per output column tile and emits it after the
  last point of the layer.

Addresses:

| memory | word |
|--------|------|
| input buffer | `p*kt + k` |
| weight buffer | tile `j*kt + k`, column i for PE i |
| stage 1 | `p*jt + j` |
| DDR output | `out_addr + (point)*jt + j`, or `out_addr + j` for a pooled layer |

## Buffers and double buffering

- **Input buffer.** Two banks of 4096 words of M x W bits.
  - The idle bank is filled while the active bank is read.
  - A write mux picks the DMA stream or the stage-2 feedback; feedback has priority.
  - A read mux picks the active bank.
- **Weight buffer.** Two banks of 1024 tiles.
  - A bank holds a whole layer (the largest PointNet layer, 256 x 4096 in the feature
    transform network, is exactly 1024 tiles) and its biases.
  - The next layer's weights load into the idle bank during the current layer's last
    pass.
- **Output buffer stage 1.** 4096 words of N x 32-bit partial sums.
  - A pass is limited to `chunk` points with `chunk * jt <= 4096` and
    `chunk * kt <= 4096`.
  - Larger clouds take several passes.
- **Output buffer stage 2.** A 64-entry FIFO of N x W-bit results.
  - Each entry carries its DDR word address, or its input-buffer address when it is fed
    back.
  - The controller issues only while stage 2 has room for everything still in the
    pipeline. Otherwise it stalls, and the stall is counted, so a slow DMA write side
    throttles the PE array without losing data.

## Control

The host writes one 6-word descriptor per layer and then the layer count, and sets
`start`. The controller then runs all layers with no further host action; the host
polls `STATUS`.

| byte address | register |
|---|---|
| 0x000 | CTRL, bit 0 start |
| 0x004 | STATUS, bit 0 busy, bit 1 done |
| 0x008 | NLAYERS |
| 0x010 / 0x014 / 0x018 / 0x01C | busy cycles / stall cycles / load-wait cycles / passes |
| 0x400 + 32d + 4w | descriptor d, word w |

Descriptor words:

- w0: `npts[15:0]`, `chunk[31:16]`
- w1: `kt[7:0]`, `jt[15:8]`, `shift[21:16]`, `order[22]`, `act[24:23]`, `pool[25]`,
  `dest[26]`, `src[27]`
- w2: `clip[15:0]`
- w3 / w4 / w5: DDR word addresses of the input, the weight block and the output

The controller has two cooperating sides:

- The **load side** prepares the next pass in the idle banks:
  1. It asks the DMA for the weights when a layer starts.
  2. It waits at a layer barrier until the previous layer's results have left stage 2.
  3. It asks the DMA for the input rows, unless the layer's input already sits in the
     input buffer because the previous layer wrote it back there (`src` = input buffer).
- The **compute side** swaps the banks and issues tile operations.

The weight stream for a layer is as follows:

1. All tiles in order `t = j*kt + k`, each as N words of M weights (word i feeds PE i).
2. Then `jt * N*32/(M*W)` words of packed 32-bit biases.

## Departures from the paper and own choices

- The paper names its two unrolled loops inconsistently. This design follows its block
  figures: M along the summed dimension inside a PE, N PEs across the output columns.
- The paper's figure places the comparator array between the adders and stage 1. Here
  partial sums go straight to stage 1, and only final sums pass the comparators on
  their way to stage 2. The results are the same.
- None of the following are given in the paper; all are this design's choices:
  - the rescale method (shift and saturate)
  - buffer depths, the stage-2 FIFO size and the descriptor format
  - the register map, the DMA command interface and the stream layouts
  - the loop order inside the two output patterns
- Feeding a result back into the input buffer is meant for results that fit one bank
  and are complete when the last pass ends, such as the pooled global feature. The host
  must not use it for an unpooled layer cut into several passes.
- Max pooling covers up to 32 column tiles (1024 features, as in PointNet).
- The DMA engine, DDR, the ARM processor system, the LiDAR/Ethernet input and the
  point-cloud preprocessing are not part of this RTL. The DMA and DDR exist only as
  behavioural models in the end-to-end testbench.
- The paper's 16-bit build corresponds to `W = 16`. It has not been simulated.

## Workloads at the default size

The multiply-accumulate counts below come from the layer sizes of PointNet. The class
and part counts (40 and 50) are assumed values (ModelNet40 and ShapeNet-part); the paper
does not give them.

| network (4096 points) | MACs | tile operations | fits |
|---|---|---|---|
| classification (with both transform nets) | 1.78e9 | 1.76e6 | yes: largest layer 1024 tiles |
| vanilla classification | 6.05e8 | 5.99e5 | yes |
| segmentation (1088 -> 512 -> 256 -> 128 -> 50) | 4.76e9 | 4.68e6 | yes: 1088 x 512 is 544 tiles, passes of <= 120 points |
| any of them at 16 bits | | | needs a `W = 16` build |

The paper's run times and throughputs imply about the same MAC counts:

| network | run time | throughput | MACs |
|---|---|---|---|
| classification | 19.8 ms | 182.1 GOPS | 1.8e9 |
| vanilla | 10.9 ms | 112.5 GOPS | 6.1e8 |
| segmentation | 34.6 ms | 280 GOPS | 4.8e9 |

## Simulation

Every testbench is self-checking, prints one line `TB_RESULT checks=N failures=M`, has
a watchdog, and ends with `$finish`. With Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pnet_pkg.sv tb/tb_pnet_accel.sv \
          --top-module tb_pnet_accel -Mdir obj_tb_pnet_accel -o sim
./obj_tb_pnet_accel/sim +verilator+rand+reset+2
```

Testbenches:

- Each block has its own testbench, `tb/tb_<module>.sv`, with random stimulus and a
  reference model.
- `tb/tb_pnet_accel.sv` is the end-to-end test on a small build (M = N = 8).
  - It runs four chained layers through the register port, a DMA/DDR model and a
    randomly stalling write stream.
  - It compares every output word with a bit-exact model.
  - It counts each mechanism: stalls, load waits, bank swaps, multi-tile partial sums,
    feedback words, write-stream back-pressure, ReLU6 clipping, saturation and ReLU
    zeroing.
- `tb/tb_pnet_accel_full.sv` runs the top with its default parameters (M = N = 32) on
  4096 points over three layers:
  1. 3 -> 64, ReLU, row order, two passes.
  2. 64 -> 128, column order with max pooling, fed back into the input buffer.
  3. 128 -> 64, ReLU6, read from the input buffer.
- `tb/pnet_accel_harness.sv` holds the shared host, DMA and reference model. Its `SCEN`
  parameter selects the layer list.
- Three workload testbenches run the paper's evaluated networks whole, at the default
  sizes, on a 4096-point frame with random weights. Every result written to DDR is
  compared with a bit-exact integer model.

| testbench | network | runs | tile operations | busy cycles | PE array busy | simulation |
|---|---|---|---|---|---|---|
| `tb_pnet_pointnet_vanilla` | PointNet-vanilla classification | 1 | 598,672 | 624,650 | 96% | ~11 s |
| `tb_pnet_pointnet_cls` | PointNet classification with both transform nets | 3 | 1,760,152 | 1,866,998 | 94% | ~33 s |
| `tb_pnet_pointnet_seg` | PointNet segmentation | 4 | 4,675,848 | 4,836,374 | 97% | ~90 s |

The three networks, in more detail:

- **Vanilla classification.** 3-64-64-64-128-1024, max pooling, then 1024-512-256-40.
- **Classification and segmentation.** These need the host between runs, as software
  on the processor would:
  - It lays the 3 x 3 and 64 x 64 results of the transform nets out as weight blocks
    for the next run.
  - For segmentation, it also builds the n x 1088 matrix of per-point features
    followed by the global feature, for the head 1088-512-256-128-50.

The vanilla network runs in one accelerator run. The global feature and the first
fully connected result come back through the feedback path.

At a given clock frequency f, a run takes its busy cycles divided by f. The paper does
not state its clock.
