# A layer-pipelined CNN accelerator with a flexible activation buffer

This is synthesizable SystemVerilog for a convolutional-neural-network
accelerator aimed at FPGAs. It computes in 8-bit fixed point. Most CNN
accelerators run one layer at a time on a shared array. This one gives **every
layer its own engine**, and all the engines work at once: each one works on a
different band of rows of the same frame, or on successive frames. Activations
pass from layer to layer through on-chip buffers. Only the input frames, the
weights and the final outputs travel to and from DDR.

Throughput is set by the slowest engine. The whole art is therefore to give
each layer just enough multipliers that all layers need the same time per row.
Two things make that balance reachable:

* **Per-layer parallelism.** Each convolution engine has its own
  input-channel parallelism C', output-channel parallelism M' and row
  parallelism K. The time an engine needs for one group of K output rows is

      T_row = K * W * ceil(C / C') * ceil(M / M')    cycles,

  and the frame rate is `f / (H0 * max_i(T_row,i / (K_i * prod of strides before i)))`.
* **A flexible activation buffer.** Between two layers it accepts
  M'_{i-1} channels per cycle and delivers C'_i x R channels per cycle, for
  *any* pair of values. Neither value has to be a power of two, and they do not
  have to be equal. This frees the allocation of multipliers to layers from
  the constraints that usually spoil the balance.

The default build in `rtl/nn_accel_top.sv` is the front of VGG16:

    DDR -> act_in_buf -> conv0 (3->64) -> conv1 (64->64) -> pool2 (2x2 max)
        -> conv3 (64->128, 112x112) -> act_out_buf -> DDR

The per-layer parameters are:

| layer | C  | M   | H x W     | C' | M' | K | multipliers | T per input row |
|-------|----|-----|-----------|----|----|---|-------------|-----------------|
| conv0 | 3  | 64  | 224 x 224 | 3  | 2  | 2 | 54          | 7168            |
| conv1 | 64 | 64  | 224 x 224 | 8  | 16 | 2 | 1152        | 7168            |
| conv3 | 64 | 128 | 112 x 112 | 8  | 8  | 1 | 576         | 7168 (14336 per row of its own) |

That is 1782 multipliers, which is 891 DSP48 slices if each slice does two
8-bit products. A frame takes 224 x 7168 ≈ 1.61 M cycles, and the multipliers
are busy 99.8 % of that time.

## The loop nest every engine runs

A convolution engine processes its layer in this order (innermost last):

    for g  in 0 .. H/K-1        group of K output rows
     for mm in 0 .. M/M'-1      output-channel group    \  one "pass" per (mm, cc):
      for cc in 0 .. C/C'-1     input-channel group     /  one set of weights
       for k in 0 .. K-1        row inside the group
        for x in 0 .. W-1       column  -> one beat = M' x C' x 3 x 3 MACs

The weights of a pass (M' x C' x R x S bytes) stay in the multipliers for K
whole rows (weight stationary). They are then replaced. A layer's weights
therefore stream from DDR once for every group of K rows. A larger K cuts DDR
traffic but needs more buffer rows. Partial sums for the K x W outputs of the
current output-channel group stay in a scratchpad (psumSpad) in each
processing element. The partial sums of the C/C' input-channel groups
accumulate there.

## Inside a processing element (`pe`, `pe_array`)

A PE computes one output channel. `pe_array` places M' PEs side by side. They
all see the same activations, and each has its own weights, bias and right
shift.

On every beat a PE receives one column of the input: C' channels for each of
the R = 3 kernel rows. For each kernel row r and kernel column s, it does
three things:

1. It multiplies the C' activations by their weights.
2. It shifts each product left by that input channel's shift. This lets
   channels with different fixed-point formats be added.
3. It adds the C' results.

The three sums of a row then run down a **chain of S registers**:

    chain[r][s] <= (flush[s] ? 0 : chain[r][s-1]) + (zmac[s] ? 0 : P[r][s])

The end of the chain is the 1-D correlation of the row with the kernel row. It
appears P = (S-1)/2 beats after the beat that brought its centre column. The
controller drives the two masks for left and right zero padding:

* `flush[s] = (x == 0) && 1 <= s <= P` cuts the chain at the start of a row.
* `zmac[s] = s > P && x < s-P` drops products that belong to columns to the
  right of the frame's end.

Top and bottom padding is done by `rowSel`, which masks whole kernel rows that
fall outside the frame. An adder tree adds the R row sums into the psumSpad
entry `k*W + x`. On the first input-channel group the sum starts from the
channel's 32-bit bias. After the last group it goes through these steps and is
sent on as an output activation:

1. ReLU.
2. A right shift (per output channel).
3. Saturation to a signed 8-bit value.

Arithmetic widths: 8-bit activations and weights, 16-bit products, 32-bit
accumulation, 5-bit shift amounts (`nn_pkg`).

**Drain beats.** A chain holds the last P columns of a row when the row ends.
If the next pass can start at once, its first beats (with `flush` set) push
those columns out. If it cannot (its weights have not arrived, or the next
group is not ready), the controller issues P *drain beats*. These read
nothing, start nothing and finish the columns in flight. So a pass never has
to wait inside itself.

## The flexible activation buffer (`act_buffer`)

This is the least obvious part of the design.

**Rows.** The buffer is a circular queue of `NR = KP + R + K - 1 + P`
rowBuffers, where KP is the row-group size of the producer. While the engine
reads the R + K - 1 rows of its current group, the producer writes its next
KP rows. The extra P = (R-1)/2 rows let a producer start its next group while
this layer is still finishing the previous one. Without them, every second
group would wait, because a reading group starts P rows above its first output
row. The published count is R + 2K - 1 (for KP = K); see "Departures" below.
Row numbers are counted across frames, so frames follow each other without
draining the pipeline.

**Channels.** Each rowBuffer is split into NCB = max(C', M'_{i-1}) memories
("channelBuffers"), each with one read and one write port. Channel c of column
x is stored in channelBuffer `c mod NCB` at address `(c div NCB) * W + x`.
Consecutive channels therefore always sit in different memories:

* A write of M'_{i-1} consecutive channels touches M'_{i-1} different
  memories.
* A read of C' consecutive channels touches C' different memories.

Both happen in one cycle, whatever the two numbers are. A rotation on each
side puts the channels back into lane order. A row crossbar picks the R
rowBuffers that hold the kernel window.

**Credits.** The writer claims room for a whole group of KP rows before it
writes (`wr_space` / `wr_claim`). The reader learns that every row of its next
group is present (`rd_grp_ready`), and it frees rows with `rd_grp_done`.
Because room is claimed per group, a producer never stalls inside a group.

## Flow control between stages

Each convolution engine (`conv_engine` = `act_buffer` + `weight_buffer` +
`conv_ctrl` + `pe_array` + three `param_rom`s) starts a group of K rows only
when all of these hold:

* its activation buffer has the rows;
* a full weight bank is ready (the weight buffer has two banks, one loading
  while the other is in use);
* the next stage has room for K rows, which it claims at once.

Inside a group the only thing that can hold an engine up is its next weight
bank arriving late. That is handled at pass boundaries with drain beats. The
2x2 max-pool stage has no buffer of its own: it follows its producer beat by
beat with a half-row line buffer, and it passes room claims straight through
to the next engine. `act_out_buf` grants room for a group only while its FIFO
can take the whole group.

Status outputs per engine: `stall*` counts idle cycles, `drain*` counts drain
beats and `busy*` shows the engine is issuing beats.

## Memory side (`ddr_driver`) and data layout

The driver serves four read streams (input frames, and the weights of the
three convolution layers) and one write stream (the outputs):

* Each read stream owns a region `rd_base[c] .. rd_base[c]+rd_words[c]-1`,
  in DDR words. The driver reads the region in order and starts again at its
  beginning. This matches weights being needed once per row group.
* A round-robin arbiter issues bursts of up to 16 words. It only picks a
  client whose 64-word FIFO has room for the whole burst, counting words
  already requested.
* Up to 4 bursts may be in flight.
* Read data must come back in request order (`mem_rdata_valid` has no ready).
  The reserved FIFO room means the driver can always accept it.
* Output words are written to consecutive addresses from `wr_base`, wrapping
  after `wr_words`.

Nothing moves before `start`. The memory-side handshake is a plain
valid/ready request with an address and length. An adapter to a vendor memory
controller (AXI or similar) goes outside this design.

Layouts (bytes, byte 0 in bits 7:0 of a word):

* **Input frames**: row, then column, then channel (RGB bytes per pixel),
  frames back to back. A pixel may straddle two words.
* **Weights** of a layer: one set per (mm, cc) in loop order. A set holds
  M' x C' x 3 x 3 bytes in (m, c, r, s) order and is padded to whole words.
  The region is the layer's full set list, re-read for every row group.
* **Output**: conv3's output in row, output-channel group of 8, column,
  channel order.
* **Bias, left-shift and right-shift tables**: small ROMs per engine, loaded
  from hex files given as parameters (`BIAS*_FILE`, `LS*_FILE`, `RS*_FILE`).
  One 32-bit two's-complement bias per output channel, one left shift per
  input channel and one right shift per output channel. Without a file, every
  bias and left shift is 0 and every right shift is 8.

## Files

| file | what it is |
|------|------------|
| `rtl/nn_pkg.sv` | widths, types, the requantisation function |
| `rtl/pe.sv`, `rtl/pe_array.sv` | processing element; M' of them |
| `rtl/act_buffer.sv` | flexible activation buffer |
| `rtl/weight_buffer.sv` | two-bank weight buffer, unpacks DDR words |
| `rtl/param_rom.sv` | bias / shift table |
| `rtl/conv_ctrl.sv` | loop-nest controller, padding masks, handshakes |
| `rtl/conv_engine.sv` | one convolution layer |
| `rtl/pool_engine.sv` | 2x2 max pool stage |
| `rtl/act_in_buf.sv`, `rtl/act_out_buf.sv` | input unpacker, output packer and counter |
| `rtl/ddr_driver.sv` | read streams, write stream, burst arbitration |
| `rtl/nn_accel_top.sv` | the pipeline, default = first four VGG16 layers |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/*.hex` | small bias / shift tables used by the testbenches |

To build a different network, add `conv_engine` / `pool_engine` instances to
the top in the same pattern. For each consumer:

* `KP` must equal its producer's K (halved after a pool);
* `MPP` must equal its producer's M'.

Then choose C', M' and K per layer so that the per-input-row times match.

## Simulation

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5, from the
directory that holds `rtl/` and `tb/` (hex files are opened by relative
paths):

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/nn_pkg.sv \
        tb/tb_nn_accel_top.sv --top-module tb_nn_accel_top -Mdir obj
    ./obj/Vtb_nn_accel_top

What the tests cover:

* **Unit tests** (`tb_pe`, `tb_pe_array`, `tb_act_buffer`, `tb_weight_buffer`,
  `tb_param_rom`, `tb_conv_ctrl`, `tb_conv_engine`, `tb_pool_engine`,
  `tb_act_in_buf`, `tb_act_out_buf`, `tb_ddr_driver`). Each compares every
  output with a model computed in the testbench, under random stalls. Where a
  rate applies, it is checked too: for example, `tb_conv_engine` checks that a
  group of K rows takes exactly K*W*ceil(C/C')*ceil(M/M') cycles once nothing
  holds it back.
* **`tb_nn_accel_top`** runs the whole pipeline at a reduced size: 8x8 frames,
  3->4->4 channels, pool, 4->4, 128-bit DDR words, four frames. It uses a
  random-latency, random-backpressure DDR model and checks every output byte
  against a reference convolution. It also counts, and requires at least once,
  each of: engine stalls, drain beats, room refused between layers and at the
  output, DDR read and write backpressure, and weight regions re-read. On the
  last frame the memory is always ready, and the bottleneck layer must keep
  its exact group period.
* **No full-size simulation.** The default-size top (three engines, 1782
  multipliers, 224-pixel rows) has not been simulated. Verilator had not
  finished building it after 15 minutes, and one frame is 1.6 M cycles. The
  largest size simulated end to end is the 8x8, four-layer configuration of
  `tb_nn_accel_top`. At the default size the design has been linted and
  elaborated only. The per-engine testbenches check the rate formula at small
  sizes, and the default parameters use the same formula.

## Departures from the published design, and limits

* **Only part of a network.** The published accelerator holds a whole network
  on chip: all convolution, pooling and fully-connected layers. The default
  top here holds the first four layers of VGG16, so none of the evaluated
  networks (VGG16, AlexNet, ZF, YOLO) fits as built. Fully-connected stages
  are not built at all, because their hardware is not described. The layer
  sizes and the per-layer C'/M'/K values are this design's own. They were
  chosen with the balancing rule above, since the published builds do not
  list them.
* **Stride 1, 3x3 kernels** are what the engines have been tested with. The
  PE is parameterised in R and S. Strided convolutions, as in the first layers
  of AlexNet and ZF, are not supported.
* **Activation buffer size.** This design uses KP + R + K - 1 + (R-1)/2 rows.
  The published text gives R + 2K - 1 rows in one place, and
  K_{i-1} + R + G(K-1) rows in its BRAM-allocation rule in another. The extra
  (R-1)/2 rows keep a row group from waiting on the previous one (see above).
* **Addressing and handshakes.** The channelBuffer mapping (`c mod NCB`), the
  credit handshakes, drain beats, double-banked weights, bursts and the DDR
  data layout are not given in the published description. They are this
  design's simplest choices that reach full rate.
* **Quantisation.** ReLU is applied before the right shift, and the result
  saturates to +127 rather than being truncated.
* **Host, PCIe and the DDR controller** are outside the design.
  `start`, the region registers and `out_count` are plain ports for whatever
  host interface is used.
* **The allocation algorithms** (choosing C', M', K from DSP, BRAM and DDR
  bandwidth budgets) are design-time software and are not included.
