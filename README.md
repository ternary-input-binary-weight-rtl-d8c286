# Ternary-input, binary-weight CNN accelerator

This accelerator runs a small VGG-style classifier on frames from a two-channel
spatial event sensor, and it is built to fit a very small power and memory
budget. Two facts keep the work small:

* **Activations are ternary** (-1, 0, +1) and most of them are zero. A feature
  map is therefore stored in two parts. The *sparsity map* has one bit per
  element (1 = non-zero). The *value stream* has one bit per non-zero element
  only (1 = +1, 0 = -1). Zeros are never fetched and never multiplied.
* **Weights are binary** (+1 / -1, stored as 1 / 0). The product of a value
  bit and a weight bit is just their XOR: equal bits give +1, different bits
  give -1. No multiplier is needed.

The value stream has no addresses. Its bits can only be read in order, so the
datapath consumes the map one small window at a time. Each window's value bits
are read serially from a FIFO. Everything else in the design follows from
that.

All RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`. The self-checking
testbenches are in `tb/`.

## Block diagram

```
            host / sensor load and read ports (active while idle)
              |            |            |            |
         +---------+  +---------+  +---------+  +-----------+
         |  MAP    |  |  WGH    |  |  MIS    |  | VAL1 VAL2 |   value FIFOs,
         | 2 banks |  | weights |  | thr/BN  |  |  (FIFOs)  |   one is input,
         +---------+  +---------+  +---------+  +-----------+   the other output
              |  map word   | 96-bit rows |            | value bits
              v             v             |            v
        +----------------------------------------------------+
        |                  FSM (tbn_ctrl)                    |
        |  builds 1x3x32 windows: RMA (map) + RVA (values)   |
        +----------------------------------------------------+
              | broadcast window      | kernel row 0 / 1 / 2
              v                       v
        +-----------+  +-----------+  +-----------+
        |  PCL 0    |  |  PCL 1    |  |  PCL 2    |  each: SLC + SORT,
        |  row 0    |  |  row 1    |  |  row 2    |  6 PEs, adder tree
        +-----------+  +-----------+  +-----------+
              \              |              /
               +---> add into TMP (partial sums, 32 x 16 bit per pixel)
                              |
                     PLR (2x2 max + ReLU) -> BNM (x factor) -> QTN (+-threshold)
                              |
                 output map word -> other MAP bank, value bits -> other VAL FIFO
```

| Module | Block |
|---|---|
| `tbn_pkg` | shared constants, types, the layer configuration struct |
| `tbn_pe` | processing engine: priority encoder, weight mux, XOR, 32 accumulators |
| `tbn_sort` | data slicer and workload-balancing sorting network |
| `tbn_pcl` | processing cluster: window/weight registers, slicer+sort, 6 PEs, adder tree |
| `tbn_plr`, `tbn_bnm`, `tbn_qtn` | pooling+ReLU, batch-norm multiplier, quantiser |
| `tbn_map_mem`, `tbn_wgh_mem`, `tbn_tmp_mem`, `tbn_mis_mem` | memories (flop/RAM arrays, synchronous read) |
| `tbn_val_fifo` | one-bit-wide value FIFO with rewind |
| `tbn_ctrl` | layer controller |
| `tbn_top` | the accelerator |

## Data formats

**Sparsity map (MAP).** Each 32-bit word holds 32 channels of one pixel.
Words are in channel-first order:

    address = chunk * H * W + y * W + x        bit b = channel 32*chunk + b

All pixels of channels 0–31 come first, then all pixels of channels 32–63,
and so on. Each bank holds 4096 words, for example 32×32 pixels × 128
channels.

**Value stream (VAL).** This is the sign bits of the non-zero elements, in map
order: word by word, and inside a word from channel 31 down to channel 0. The
FIFO holds 98,304 bits (12 kB).

**Weights (WGH).** Each 96-bit word is one kernel row (3 columns × 32 input
channels) for one output channel. Column 0 is in bits 95:64. Bit 32·col + b
is input channel b. The word layout matches the 1×3 window, so a weight word
and a window line up bit for bit. The address is

    ((oc_chunk * n_ic + ic_chunk) * 32 + k) * 3 + kernel_row

counted from the first output chunk of the run. Here k is the output channel
inside its 32-channel chunk. WGH has 24,576 words (288 kB).

**Partial sums (TMP).** Each word holds 32 signed 16-bit sums for one output
pixel. TMP has 1056 words.

**MIS.** This memory has two parts of 16 words × 32 × 16 bits each. One part
holds the quantisation thresholds and the other the BN factors, one word per
32-channel output chunk. Thresholds are non-negative integers. The BN factors
are signed Q8.8.

## How a layer is computed

The value stream can only be read in order, so a 3×3 window cannot gather its
nine pixels' values at once. Instead the controller slides a **1×3 window**
along one input row. Each step reads one new map word and then that pixel's
value bits, one per cycle. The window (96 map bits, ≤96 value bits) is
broadcast to three clusters. Cluster *r* holds kernel row *r* for 32 output
channels and computes the window's contribution to output row *y + 1 − r*.
The controller adds the three 32-channel results into TMP. Contributions to
rows outside the image are dropped, which acts as zero padding. When the
window reaches the end of a row, it starts again at the left of the next row.
The partial sums already in TMP pick up the next row's contributions.

The loops are:

```
for each 32-channel output chunk:
    clear TMP, rewind the input value FIFO
    for each 32-channel input chunk:
        load 3 x 32 weight rows (one cluster per kernel row, 1 word/cycle)
        for y, for x: shift window, read map word + value bits,
                      run clusters, add 3 results into TMP
    for each output pixel (2x2 block when pooling):
        read TMP -> PLR -> BNM -> QTN
        write map word to the other bank, push its value bits (1/cycle)
```

The input value stream is read once for every output chunk. The FIFO rewind
makes that possible.

**Fully connected layers** run as a 1×1 image. Every map word of the input
becomes one input "chunk", so `n_ic` is the number of input map words. Only
the centre column of kernel row 1 then carries weights.

**Piecewise runs.** A layer whose weights do not fit WGH can be run as
several runs. Each run covers output chunks `oc_first … oc_first+n_oc−1`, and
the host reloads WGH and MIS in between. Output map words go to their
absolute addresses. The output FIFO is cleared only by the run with
`oc_first = 0`, so later pieces append to the same value stream. FC1
(8192 → 1024) needs this: its 1 MB of weights fill WGH once per 32-output
chunk.

Cycle cost per window is about 1 (map read) + number of non-zero values
(serial value read) + 4 + the slowest PE's load (clusters) + a few cycles for
the TMP read-modify-write. Reading window data dominates, as expected for a
serial value FIFO.

## Inside a cluster: slicing, sorting, zero skipping

The 96 window bits are cut into **12 groups of 8 bits**, two per PE. A group's
*load* is its number of set map bits, and each non-zero costs its PE one
cycle. If PE *i* simply took groups 2i and 2i+1, a dense corner of the image
would make one PE slow while the others sit idle. Instead a **sorting
network** orders the groups by load in one combinational stage. It is an
odd-even transposition network, 12 rows of compare-exchange cells on
(load, group index) tags. **PE *i* then takes the *i*-th heaviest group and
the *i*-th lightest.** As a worked example, 3 PEs with group loads
4, 8, 0, 4, 4, 5 finish in 12 cycles unsorted but in 9 after sorting. The
testbench checks this case.

Each PE receives its two groups as 16-bit registers. PMA holds the map bits.
PVA holds the value bits, packed with the first value in bit 0. PWG holds,
for each of the 32 output channels, the weight bits at the same positions.
Every cycle the PE does the following:

1. A priority encoder finds the highest set PMA bit.
2. A mux picks that position's weight bit for each of the 32 output channels.
3. 32 XOR gates compare those bits with PVA bit 0. Each accumulator adds +1
   on equal bits and −1 otherwise.
4. The PMA bit is cleared and PVA shifts right.

Zeros cost nothing. The cluster adds the six PEs' sums in an adder tree. From
`start` to `done` takes 3 + (slowest PE load) cycles.

## Pooling, normalisation, quantisation

Only the output pass works on multi-bit numbers:

* **PLR.** With pooling on, it takes the per-channel maximum of the four sums
  of a 2×2 block and clamps it at zero (ReLU). With pooling off, the single
  sum passes unchanged.
* **BNM.** It computes `(x * factor) >>> 8` per channel. The factor is signed
  Q8.8 and the shift rounds toward −∞. With BN off, `x` passes unchanged.
* **QTN.** It uses two comparators per channel: `x > +thr` gives +1 and
  `x < −thr` gives −1. Their OR is the map bit and the first comparator is the
  value bit. The value bits of the non-zero channels are packed channel 31
  first and pushed into the output FIFO one per cycle.

## Using the top level

`tbn_top` has no parameters: the sizes are the `tbn_pkg` constants. The host
works in three steps:

1. While `busy` is low, the host does the following:
   * writes the input map into bank `in_sel` (`host_map_*`);
   * selects the input FIFO with `host_val_sel`, clears it with a
     `host_val_clr` pulse and pushes the value bits one per cycle with
     `host_val_push` / `host_val_bit`;
   * writes the weights (`host_wgh_*`) and the thresholds and factors
     (`host_mis_*`, `host_mis_sel`: 0 = threshold, 1 = factor).
2. It sets `cfg` and pulses `start`. The fields are `width`, `height`,
   `n_ic`, `n_oc`, `oc_first`, `pool_en`, `bn_en` and `in_sel`.
3. It waits for the one-cycle `done` pulse. The output is then in bank
   `~in_sel` and in the other FIFO (`val_count`, `host_val_peek_*`). The next
   layer uses them as input by flipping `in_sel`.

The map, TMP and MIS reads return data one cycle after the address. Host
accesses made while `busy` is high are ignored. `val_overflow` is a sticky
flag for a push into a full FIFO. `stat_*` count cycles spent in each phase of
the last layer: window loading, clusters, TMP accumulation, weight loading,
output pass and TMP clearing.

## Memory sizes and the reference network

The memory sizes come from the published chip's layout. This table shows how
the network's layers map onto them:

| Layer | Shape | Map words in → out | WGH words | Fits |
|---|---|---|---|---|
| CV1 | 32×32×2 → 128 | 1024 → 4096 | 384 | yes, if ≤75 % of the outputs are non-zero (VAL size) |
| CV2 + pool + BN | 32×32×128 → 16×16×128 | 4096 → 1024 | 1536 | yes |
| CV3 | 16×16×128 → 256 | 1024 → 2048 | 3072 | yes |
| CV4 + pool + BN | 16×16×256 → 8×8×256 | 2048 → 512 | 6144 | yes |
| CV5 | 8×8×256 → 512 | 512 → 1024 | 12288 | yes |
| CV6 + pool + BN | 8×8×512 → 4×4×512 | 1024 → 256 | 24576 (= all of WGH) | yes |
| FC1 | 8192 → 1024 | 256 → 32 | 32 × 24576 | in 32 runs, weights reloaded |
| FC2 | 1024 → 10 | 32 → 1 | 3072 | yes (one 32-output chunk, 10 used) |

With random data (about 25 % non-zero input, random weights and thresholds)
the whole network takes **4.50 M cycles, 449 ms at 10 MHz**. The published
chip reports 0.44 s per inference at 10 MHz. Per-layer cycle counts are
printed by `tb_tbn_net`.

## Where this RTL goes beyond the published description

The published description gives the block structure, the data formats, the
1×3-window scheme, the slicing/sorting/pairing rule, the PE datapath and the
quantiser's comparator pair. The following are this implementation's choices:

* Every bit width that is not a memory width: 8-bit PE and cluster sums,
  16-bit TMP sums, 16-bit thresholds and Q8.8 BN factors, 24-bit BN output.
* Max pooling (the description only says "pooling"), no ReLU on layers
  without pooling, and no BN offset term (only a factor).
* Strict threshold comparisons.
* The exact WGH/MIS address layout, and MIS split into thresholds and factors.
* The FIFO's rewind, clear, overflow flag and peek port. The map-bank and FIFO
  ping-pong between layers.
* The whole controller sequence: loop order, TMP clearing, weight-load timing,
  cycle-level pipeline, border handling by zero padding. The same goes for
  fully connected layers as 1×1 images and for piecewise runs.
* Where the stored partial sums meet the new ones. The published block
  diagram feeds TMP back into the clusters. Here the controller reads TMP,
  adds the three cluster results and writes the sum back. The arithmetic is
  the same.
* Host ports that stand in for the sensor interface and the system around
  the chip.
* The choice of sorting network (odd-even transposition). The description
  only asks for a one-cycle sort.
* Product sign. A published worked PE example shows partial-sum updates in
  its second step that do not follow from its own inputs under the XOR rule
  shown in its first step. This RTL follows the XOR rule, with equal bits
  giving +1.

Not built: the analog event sensor (pixel averaging and comparators), which
delivers the input map and value stream. Also not built: pads, the clock
source and SRAM macros (the memories are plain arrays). The quoted
throughput of 46.4 GOPS could not be related to this datapath, which makes
576 binary products per cycle.

## Verification

Every block has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `tb_tbn_pe` | random windows against a bit-level model; one cycle per non-zero |
| `tb_tbn_sort` | the 4,8,0,4,4,5 example; random windows: every non-zero routed exactly once, PE loads, slowest PE against an independent sort-and-pair model |
| `tb_tbn_pcl` | random windows and weights: sums and latency 3 + max load |
| `tb_tbn_plr`, `tb_tbn_bnm`, `tb_tbn_qtn` | random vectors against integer models |
| `tb_tbn_*_mem`, `tb_tbn_val_fifo` | read/write, banks, rewind, overflow |
| `tb_tbn_ctrl` | the controller with ideal clusters and behavioural memories: conv, conv+pool+BN, FC |
| `tb_tbn_top` | a chain of four small layers (conv, conv+pool+BN, FC, FC in two runs); checks the output maps, value streams, TMP contents, window counts and cluster cycles, and counts that zero skipping, a sort that helps, pooling, BN, FC mode, bank swap, several input chunks, FIFO rewind and a piecewise run all occur |
| `tb_tbn_full` | full default size: CV1 and CV2 on a 32×32 frame (about 20 s) |
| `tb_tbn_net` | full default size: the whole network CV1 … FC2 (about 1 min) |

The reference model (`tb/tbn_ref.svh`) computes each layer directly from
integer arithmetic on the ternary elements. It shares nothing with the RTL
except the data formats. `tb/tbn_tb_host.svh` holds the host-side load, run
and compare tasks.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/tbn_pkg.sv \
        tb/tb_tbn_top.sv --top-module tb_tbn_top -Mdir obj -o sim
    obj/sim

Every testbench has a watchdog that counts a failure and ends the run if it
hangs.

All modules are synthesizable. The memories are written as arrays with one
synchronous read port. A synthesis flow maps them to RAM macros or, at these
sizes, to a large number of flip-flops.
