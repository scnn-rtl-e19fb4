# SCNN: a sparse convolution accelerator in SystemVerilog

Pruned CNNs have many zero weights, and ReLU makes many activations zero. A
dense accelerator still spends multiplier cycles and storage on all of them.
SCNN keeps weights and activations in compressed form everywhere on chip. Only
non-zero values ever reach the multipliers. The central trick is the
**Cartesian product**. In a convolution, any weight of input channel *c* and
any activation of the same channel *c* contribute to some output. So a PE can
take a vector of F non-zero weights and a vector of I non-zero activations of
the same channel and multiply all F×I pairs. Every product is useful.
The price is that the products no longer land on neighbouring outputs. Each
product carries its own output coordinate, which is computed from the
compressed indices, and a crossbar scatters it into a bank of accumulators.

This RTL implements that architecture in the main configuration of the SCNN
paper (Parashar et al., ISCA 2017):

* 8×8 processing elements (PEs), each with a 4×4 multiplier array (1024
  multipliers in total);
* 16-bit operands and 24-bit accumulators;
* 32 accumulator banks of 32 entries each, double buffered;
* a 50-entry weight FIFO, and 10 KB input and 10 KB output activation RAMs per PE.

It simulates with Verilator and is written in synthesizable SystemVerilog. It
is not the authors' implementation. Where the paper stops, this design makes
its own choices. They are listed below and in each file's header.

## 1. Data placement: tiles, channels, groups

A layer takes C input planes of W×H activations and produces K output planes
of the same size. Filters are R×S, with stride 1 and zero padding ("same"
convolution). The array splits every plane into Wt×Ht tiles. PE (row, col)
owns x = col·Wt … col·Wt+Wt−1 and y = row·Ht … row·Ht+Ht−1 of *every* channel,
in both its input and output RAM. Activations therefore never move between PEs
from one layer to the next. The output RAM (OARAM) of one layer simply becomes
the input RAM (IARAM) of the next one. The two RAMs swap roles at the end of
every layer (`ram_sel`).

Output channels are processed in **groups** of Kc. A group's partial sums for
the whole tile must fit the accumulators. With the tile's halo ring included,
that needs Kc·(Wt+R−1)·(Ht+S−1) ≤ 32·32 = 1024. All weights are broadcast to
all PEs as a single stream, in this order: for each group, for each input
channel, one *block* with the non-zero weights of Kc×R×S.

## 2. The compressed format

Each element is a 16-bit value with a 4-bit index. The index holds the number
of zeros that come before the value in the dense order:

* activation block, one per (channel, tile): x-major, y fastest;
* weight block, one per (group, input channel): k, then r, then s fastest.

The position of an element is the previous position, plus its index, plus one.
Run-length decoding is therefore a prefix sum across the vector, done by
`rle_decode`. A run longer than 15 zeros is broken by a zero-valued
*placeholder* element with index 15. The compressor writes one every 16th
consecutive zero. It does not write the zeros at the end of a block.

Storage:

* **Weight FIFO entry** (`wvec_t`): 4 elements (4 × 20 bits = 10 bytes, 50
  entries = 500 B as in the paper). It also carries a lane-valid mask and a
  `last` flag that marks the end of the block. A block with no non-zero
  weight is sent as one entry with mask 0 and `last` = 1.
* **Activation RAM word** (`avec_t`): 4 elements. Each channel's block starts on
  a new word. A count table in the same RAM records how many elements each
  channel has. Channel *c*'s block starts right after channel *c−1*'s last
  word, so a reader walks the blocks in order. A count of 0 is an empty channel.

The paper also says the RAMs carry "a 10-bit overhead" per value for the
coordinates. That is in tension with its 4-bit index. This design uses
4-bit indices and keeps no other per-value coordinate bits.

## 3. Inside a PE

```
 weight FIFO ──F values──► F×I multipliers ──► crossbar slots ──► 32 accumulator banks ──► PPU ──► OARAM
      │ F indices              ▲                 ▲ bank/entry          (two sets)            ▲▼
      ▼                        │                 │                                     halo links to
 rle_decode ─► coord_compute ──┼─────────────────┘                                     8 neighbours
      ▲                        │
 IARAM ──I values + indices ───┘ (decoded once per activation vector)
```

The PE state machine (`pe.sv`) walks the loop nest of the
PlanarTiled-InputStationary-CartesianProduct-sparse dataflow:

```
for g in groups:                       global barrier after each group
  for c in input channels:
    read count[c]                      (1 cycle)
    for each activation vector of c:   read word, decode positions (2 cycles)
      for each weight vector of block(g,c):   one per cycle
        F×I products, coordinates -> crossbar slots
```

Activations are *stationary*: one activation vector stays in registers while
the whole weight block of its channel streams past. The weight FIFO therefore
replays a block once for each activation vector. It has a replay pointer with
three commands: advance, rewind to the block start, and release the block. New
blocks can be written behind it all the while. The sequencer gives the weights
to all PEs at once, and the stream stops whenever any PE's FIFO is full.

**Output coordinates** (`coord_compute.sv`). For weight (k, r, s) and
activation (x, y) of the tile, the product belongs to output
(k, x−r+⌊(R−1)/2⌋, y−s+⌊(S−1)/2⌋). The accumulator range is extended by the
halo ring, so the local coordinates lx = x−r+R−1 and ly = y−s+S−1 are never
negative:

    addr  = (k·(Wt+R−1) + lx)·(Ht+S−1) + ly
    bank  = addr mod 32,   entry = addr div 32

**Scatter crossbar** (`scatter_xbar.sv`). The 16 products of a cycle are
registered in 16 slots. Each cycle, every bank takes the lowest-numbered
pending slot that targets it. A batch thus takes as many cycles as the largest
number of its products that share one bank. The next batch is accepted only
when every slot will be empty, so bank conflicts stall the multipliers. This
is the main throughput loss besides partly filled vectors. The paper makes it
rare by having twice as many banks as products (A = 2·F·I).

**Accumulator banks** (`acc_bank.sv`). Each bank has one adder and two sets of
32 × 24-bit entries. Products do a read-add-write on the active set in a
single cycle. The other set belongs to the post-processing unit (PPU), which
reads it, adds halo sums into it and clears it. The sets swap at every group
boundary. The PPU therefore drains group g while the multipliers already work
on group g+1.

## 4. Halos and the global barrier

Near a tile edge, a product can belong to an output that is owned by a
neighbouring PE. These **output halo** partial sums are kept locally, in the
halo ring of the accumulator range, and are sent once per group. When the
sequencer sees every PE waiting at the group boundary (`group_done`) and every
PPU idle, it pulses `barrier_release`. All PEs then swap accumulator sets and
start their PPUs **in the same cycle**.

The PPU's first pass scans the whole extended range in a fixed order, one
entry per cycle. Each halo entry is read, cleared and sent to the PE that owns
the output. The message goes out registered, with a direction (N, NE, E, …,
NW) and the receiver's local address (lx ± Wt, ly ± Ht). All PEs scan the same
addresses in the same cycle, so in any cycle they all send in the same
direction. Each PE therefore receives from at most one neighbour per cycle: it
listens on link d only for messages whose direction is opposite to d. It adds
them into its own interior entries through the second port of the drained set.

Two idle cycles then let the last messages land. The second pass reads and
clears the interior. PEs at the array edge have no neighbour in some
directions, and what they would send there is dropped. That is exactly zero
padding at the image border.

Pass 1 takes Kc·(Wt+R−1)·(Ht+S−1) cycles and pass 2 takes Kc·Wt·Ht cycles,
plus 2 cycles in between. A halo can only reach the adjacent PE, so
⌊(R−1)/2⌋ ≤ Wt and ⌊(S−1)/2⌋ ≤ Ht are required.

## 5. Post-processing and number format

Operands are Q8.8. A product is shifted right arithmetically by 8 bits, which
gives Q16.8. This fits the 24-bit accumulator exactly. Sums wrap modulo 2^24.
The PPU's second pass performs these steps on each value:

1. applies ReLU, if `cfg.relu` is set;
2. saturates to 16 bits (Q8.8);
3. compresses the channel as in section 2;
4. packs 4 elements per OARAM word and writes the channel's count.

The paper also names pooling and dropout as PPU functions. Neither is built
(see section 8).

## 6. Using the top level

`scnn_top` ports (types in `rtl/scnn_pkg.sv`):

| port | use |
|---|---|
| `start`, `cfg` (`layer_cfg_t`), `busy`, `done` | run one layer. `cfg` holds C, K/Kc, Kc, R, S, Wt, Ht, ReLU |
| `w_valid`, `w_ready`, `w_data` | weight stream: for each group, for each input channel, one block ending with `last` |
| `ld_pe`, `ld_we`, `ld_addr`, `ld_data`, `ld_cwe`, `ld_ch`, `ld_cnt` | write words and channel counts into a PE's IARAM before a layer |
| `rd_pe`, `rd_re`, `rd_addr`, `rd_cre`, `rd_ch` → `rd_data`, `rd_cnt` | read a PE's IARAM one cycle later. After a layer this returns the layer's output |
| `stats[]`, `barrier_wait`, `groups_done` | event counters per PE, and barrier load imbalance |

Sequence for one layer:

1. Load the tiles (only for the first layer).
2. Pulse `start`.
3. Stream the weights until `done`.
4. Either start the next layer, or read the outputs.

The memory side, a DRAM controller in the paper, is not part of this design.
These ports stand in for it.

## 7. Parameters against the paper

| quantity | paper | RTL default |
|---|---|---|
| PEs | 64 (8×8) | `ROWS`=8, `COLS`=8 |
| multiplier array F×I | 4×4 | `F`=`I`=4 |
| multiplier / accumulator width | 16 / 24 bit | 16 / 24 |
| accumulator banks × entries | 32 × 32 | 32 × 32, ×2 sets (6 KB, as in the paper's area table) |
| weight FIFO | 50 entries, 500 B | 50 entries of 4×20 bits (+5 sideband bits) |
| IARAM / OARAM | 10 KB each | 1280 words × 4 values each, plus a 1024-entry count table |
| run-length index | 4 bits | 4 bits |

All sizes are the paper's. Nothing was scaled down.

## 8. Departures and limits

* **Stride 1 only.** The paper does not discuss strides. Layers such as AlexNet
  conv1 (stride 4) cannot be run.
* **Pooling and dropout are not built.** The paper only names them.
* **No DRAM tiling.** The paper says it leaves out the details of spilling
  large layers (VGGNet) to DRAM.
* A weight block (Kc×R×S non-zeros of one input channel) must fit the 50-entry
  FIFO, and the accumulator range must fit 1024 entries. An assertion in
  `weight_fifo` flags a block that does not fit, which would otherwise
  deadlock.
* Halos reach only the adjacent PEs (section 4).
* All tiles have the same size. An image that does not divide evenly is
  padded with zeros by whoever loads it.
* Arbitration (fixed priority), the barrier handshake, the two-pass halo
  schedule, the count table, the number format, saturation and clear-on-read
  are all this design's choices.

How the paper's networks fit at the default sizes:

* **Fit:** AlexNet conv2–conv5, and GoogLeNet inception modules 3a–4e when the
  activations are sparse enough to fit a 10 KB RAM.
* **Do not fit:**
  * GoogLeNet 5a/5b: the 5×5 halo is wider than a 1-pixel tile.
  * The strided first layers.
  * VGGNet: 50K activations per PE against 5K per RAM.

## 9. Verification

Every block has a self-checking testbench in `tb/`. The expected values are
computed from the definitions, not from the RTL. The shared reference model is
in `tb/scnn_tb_pkg.sv`: run-length encoder, fixed-point product, ReLU and
saturation.

| testbench | checks |
|---|---|
| `tb_weight_fifo` | fill to 50, replay/rewind/release against a written stream |
| `tb_act_ram` | every word and count, one-cycle read latency |
| `tb_coord_compute` | addresses for random shapes against the formula above |
| `tb_mult_array` | products and valids, including extreme values |
| `tb_scatter_xbar` | each product reaches its bank exactly once; batch time = worst bank conflict |
| `tb_acc_bank` | both sets against a model during updates, reads, clears and halo adds |
| `tb_ppu` | halo messages, neighbour adds, ReLU/saturation, compressed words and counts, clearing, cycle count |
| `tb_layer_sequencer` | broadcast handshake, barrier release timing, barrier-wait count, role swap |
| `tb_pe` | one PE (1×1 array), two layers against a reference convolution |
| `tb_scnn_top` | 2×3 PEs, two chained 3×3 layers, bit-exact compressed outputs |
| `tb_scnn_workloads` | 2×2 PEs, a 1×1 layer (an inception reduction) feeding a 5×5 layer (AlexNet conv2, inception 5×5), bit-exact |
| `tb_scnn_full` | the default 8×8 array, same test (48×40 image) |

The end-to-end tests live in `tb/scnn_tb_harness.sv`. They check every
compressed output word and count, bit for bit. They also fail if any of the
design's mechanisms never occurs:

* crossbar conflict stalls;
* weight back-pressure;
* barrier waits;
* halo sums sent and received;
* compressor placeholders;
* PPU draining while the PE computes;
* empty input channels;
* ReLU clamps;
* the IARAM/OARAM swap.

To run a testbench with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/scnn_pkg.sv tb/scnn_tb_pkg.sv \
          tb/tb_scnn_top.sv --top-module tb_scnn_top -o sim
./obj_dir/sim
```

Each testbench ends with `TB_RESULT checks=N failures=M`. The full-size test
takes about 2.5 minutes to build and a few seconds to run.

Not verified:

* timing closure, and the area of a synthesized netlist;
* layers larger than the tests above. In particular, tiles that fill the
  RAMs were not simulated.
