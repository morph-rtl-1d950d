# A flexible 3D-CNN accelerator with programmable loop control

Video networks built from 3D convolutions (C3D, I3D, 3D ResNets) vary a lot from one layer
to the next. The number of frames, channels and filters changes, and so does whether inputs,
filters or partial sums dominate on-chip storage. An accelerator that fixes its loop order,
buffer partitions and PE parallelism at design time gets good data reuse on only some layers.

This design fixes none of them in hardware. Three choices are set per layer, by configuration
registers:

* **Buffer split.** Every on-chip buffer is a set of equal banks, and each data type (inputs,
  weights, partial sums) is given a contiguous range of banks.
* **Loop order and tile shape.** Every address stream is produced by a small *programmable loop
  FSM*, a loop nest whose bounds and steps are registers. Its *event triggers* derive control
  strobes (end of a round, end of a dot product) from loop-terminate signals.
* **PE parallelism.** Every network is a bus with a destination *mask*. A second mask, used only
  in the final round, covers edge tiles that occupy fewer destinations.

The SystemVerilog here implements that architecture as a three-level hierarchy:

* an L2 global buffer,
* M clusters, each with an L1 buffer,
* N processing elements (PEs) per cluster, each with an L0 buffer and a V_w-lane vector
  multiply-accumulate unit.

It computes 3D convolutions end to end. Weights and activations are 8-bit signed; partial
sums (psums) are 32-bit.

## Default configuration

| quantity | default | notes |
|---|---|---|
| clusters `M` / PEs per cluster `N` | 6 / 16 | 96 PEs |
| vector lanes per PE `VW` | 8 | lanes run across output channels (K) |
| MACCs per cycle (peak, all PEs) | 96 | one vector MACC per PE every `VW` cycles, see *PE datapath* |
| L2 | 1 MB | 16 banks × 8192 × 64 bit |
| L1 (per cluster) | 64 kB | 16 banks × 1024 × 32 bit |
| L0 (per PE) | 16 kB | 16 banks × 1024 × 8 bit |
| L2→L1 / L1→L0 networks | 3 × 64 bit / 3 × 32 bit | one network per data type |
| loop FSM | 8 loops, 16-bit counters, 20-bit addresses, 2 triggers | `D`, `CW`, `AW`, `NT` in `morph_pkg` |

All constants and the shared configuration structs are in `rtl/morph_pkg.sv`.

## Hierarchy

```
morph_top
 ├─ config_buffer (L2, 64-bit words)      ── sram_bank × 16
 ├─ xfer_src × 3  (L2 read engines)  ─► bcast_net × 3 (mask over clusters)
 ├─ xfer_dst      (32→64 psum packer into the L2 psum-update port)
 └─ cluster × M
     ├─ xfer_dst × 3 (64→32 fill engines)  ─► config_buffer (L1, 32-bit words)
     ├─ xfer_src × 3 (L1 read engines)     ─► bcast_net × 3 (mask over PEs)
     ├─ xfer_dst     (8→32 psum packer from the selected PE)
     ├─ xfer_src     (L1 psums up to the L2)
     └─ pe × N
         ├─ xfer_dst × 3 (32→8 fill engines) ─► config_buffer (L0, 8-bit words)
         ├─ loop_fsm × 4 (weights, inputs, psum reload, psum unload)
         ├─ mac_alu (VW lanes, one accumulator per lane)
         └─ xfer_src (psum bytes up to the cluster)
```

Every transfer engine is a `loop_fsm` plus a little glue:

* `xfer_src` reads a buffer at the FSM's addresses and puts the words on a valid/ready stream.
  A 4-entry FIFO (`sync_fifo`) absorbs the one-cycle read latency under backpressure.
* `xfer_dst` takes a stream and writes it into a buffer at the FSM's addresses. It splits wide
  words into narrower ones, or packs narrow words into wider ones.

## The programmable loop FSM

`loop_fsm` holds `D` loop bounds `b_j`, `D` steps `s_j`, a base address and `NT` event masks.
These are all latched from a `loop_cfg_t` on `start`. Loop 0 is the innermost.

Each time `adv` is asserted, the FSM advances by one iteration:

1. It finds the innermost loop that is not at its last index.
2. It increments that loop and resets every loop inside it.
3. It adds that loop's step to the address register.

When all loops are at their last index, the nest is finished: `done` pulses and the FSM goes
idle.

Because the added step belongs to the loop that takes the carry, the steps are *deltas*, not
strides. The package function `mk_loop(base, bounds, strides, masks)` converts ordinary
strides:

    s_j = stride_j − Σ_{k<j} (b_k − 1)·stride_k

With that conversion, any affine address walk over up to 8 nested loops can be programmed.
This includes strided convolution windows, any loop order, and tiles that are sub-blocks of
larger tensors.

The event triggers work from `last[j]`, which is high when loops 0..j are all at their last
index, so loop `j` terminates in this state. Trigger `t` is the OR of `last[j]` over the loops
selected by mask `t`. In this design:

* trigger 0 of a read engine marks the last beat of a network round;
* in the PE's weight FSM, trigger 0 marks a complete weight vector (the lane loop ends);
* in the PE's weight FSM, trigger 1 marks a complete dot product (all filter taps of a
  channel tile).

## Configurable buffers

`config_buffer` is used at all three levels, with different word widths.

**Bank assignment.** `bank_cfg_t` gives each type a base bank and a bank count. The buffer
exports the resulting 2-bits-per-bank assignment vector (0 input, 1 weight, 2 psum, 3 unused).

**Addressing.** Addresses are relative to the type's region:

    bank = base[type] + addr / DEPTH
    word = addr mod DEPTH

Types occupy disjoint banks, so the three read ports (one per type) never conflict.

**Write ports.** There are four:

* three ports from the level above, one per type;
* one *psum-update* port from the level below.

The higher-level psum write and the lower-level psum update share the psum path. When both
arrive in the same cycle, the higher level wins and `pu_ready` drops: the update is stalled by
backpressure, not lost. An assertion in the buffer states this rule.

**Range errors.** An access outside its type's banks is dropped and sets the sticky `err`
output.

**Double buffering.** This is done in software, by addressing: a tile is loaded into one half of
a type's region while the engines compute from the other half. There is no hardware ping-pong
switch.

## Networks and the last-round mask

`bcast_net` is a bus from one source to `NDST` destinations, with a mask register:

* one mask bit is unicast, several are multicast, all are broadcast;
* a beat moves only when every selected destination is ready, so all of them take it in the
  same cycle.

A transfer can consist of several rounds, for example one round per group of PEs. The sending
engine's trigger 0 marks the final beat of each round, and a counter in the network counts
rounds. In the round numbered `last_round`, a second mask replaces the first, so an edge round
can reach fewer or different destinations.

The end-to-end tests use this to send two different filter groups to two clusters in one
transfer. The first round uses `mask`, the second uses `last_mask`.

## PE datapath

The L0 stores 8-bit words, so a PE reads one weight byte per cycle. The lanes' weights for one
input activation are collected in a shift register. The last weight of the vector is used
straight from the read port, so the vector MACC happens in the same cycle as that read.

For each output position (one *dot product*), the PE goes through four phases:

| phase | cycles | what happens |
|---|---|---|
| PREP | 1, or 4·VW | clear the accumulators, or, when `reload` is set, reload them byte by byte from L0 psums written by an earlier channel tile |
| RUN | taps·VW | one weight byte per cycle; a vector MACC when trigger 0 of the weight FSM fires; the input FSM advances on that trigger |
| DRAIN | 1 | the last MACC |
| UNLD | 4·VW plus stalls | accumulator bytes go to the L0 psum region through the psum-update port, and are stalled while the L1 writes L0 psums in the same cycle |

A compute pass of `NPOS` output positions and `taps` filter taps therefore takes about:

    NPOS · (PREP + taps·VW + 1 + 4·VW)   cycles

The PE testbench checks this count. Peak throughput is one 8-lane MACC per PE every 8 cycles,
so one MACC per PE per cycle, or M·N MACCs per cycle for the array. That is the rate the
network widths are sized for: with R=S=T=3, a 64-bit L2→L1 bus and a 32-bit L1→L0 bus keep
M·N MACCs per cycle supplied. The 8-bit L0 read port is what sets this rate. A wider or
multi-bank weight read would raise it, and the buffer would allow that, but it is not built.

Loop order inside the PE is entirely set by the `cwt`, `cin`, `cps_rd` and `cps_wr` programs.
The one fixed rule is that lanes are loop 0 of the weight walk, so the lanes run across output
channels K.

## Operating the accelerator

There is no on-chip layer sequencer. A controller (host, or a small sequencer added later)
performs each step of a layer by:

1. driving the configuration structs (`l2_cfg`, `l1_cfg`, `pe_cfg`, and the bank assignments
   with their load strobes);
2. pulsing the start bits of the engines taking part;
3. waiting for `busy` to fall.

Engines that are started together run concurrently. A typical layer runs as:

1. **Load the L2.** Write inputs and weights into their L2 regions through `dram_wr_*`.
2. **Fill the L1s.** Start the L2 read engines (`l2_down_start`) and the L1 fill engines
   (`l1_recv_start`). Masks choose the clusters: broadcast for inputs, one round per cluster
   group for weights.
3. **Fill the L0s.** Start the L1 read engines (`l1_down_start`) and the PE fill engines
   (`pe_recv_start`).
4. **Compute.** Pulse `pe_cmp_start`. When the channel dimension is tiled, later passes set
   `reload`.
5. **Drain the L0s.** Pulse `pe_up_start` for one PE index, together with `l1_up_wr_start`
   (with `up_sel` choosing the PE). Repeat for each PE index.
6. **Drain the L1s.** Pulse `l1_up_rd_start` for one cluster, together with `l2_up_start`.
7. **Read back.** Read the L2 psums through `dram_rd_*`.

Every configuration struct is shared by all instances at its level: all clusters get the same
`l1_cfg` and all PEs the same `pe_cfg`. The start bits are per instance.

`ev` reports, each cycle, whether each of four mechanisms happened:

* bit 0: an L1 or L2 psum-update stall;
* bit 1: an L0 psum-update stall;
* bit 2: a beat under a last-round mask;
* bit 3: an accumulator reload.

## Where this RTL departs from, or goes beyond, the description it follows

**No on-chip tile sequencer.** The source architecture names L2 and L1 "control" blocks but
does not give their sequencing logic. Here, every transfer and compute pass is started
explicitly, and the outer loop over DRAM tiles belongs to whoever drives the ports.

**Parallelism across PEs and clusters only along output dimensions.** There is no network that
adds psums from different PEs. Splitting the reduction dimensions (C, R, S, T) across PEs is
not supported; splitting K, H, W or F is.

**Psum width.** Psums are 32 bits. The exact need is 2·8 + log2(R·S·T·C) bits, which is at most
30 bits for the networks listed below.

**One weight byte per cycle in the PE.** See *PE datapath*. The L0 word width follows the
description (8 bits); how a vector of lane weights is fetched is this design's own choice.

**Logical double buffering** is done by software addressing, as described under *Configurable
buffers*.

**Fixed-function baseline not included.** The fixed-loop-order baseline the architecture is
compared against is not included. Neither is the software that chooses loop orders and tile
sizes, or any pooling, activation or fully connected hardware.

**Choices where the description is silent:**

* the valid/ready handshakes;
* the loop counter and address widths;
* the order of the byte splitting and packing (least significant first);
* the error flag;
* the reading of which step the loop FSM adds (the step of the loop that increments).

## Workloads

The design as built holds the convolution layers of C3D, I3D, 3D ResNet-50, the two-stream 2D
network and AlexNet, tiled through the L2:

* every loop bound in those networks is below 2^16;
* every on-chip address fits in 20 bits;
* every psum fits in 32 bits.

Whole layers are larger than the 1 MB L2, so the outer tile loop runs through the DRAM ports.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and ends with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_loop_fsm` | address sequences and triggers against a software loop nest, random programs |
| `tb_sram_bank` | random writes/reads against a model |
| `tb_sync_fifo` | random push/pop traffic against a queue |
| `tb_config_buffer` | two bank layouts, all ports, the assignment vector, psum-update stall, range errors |
| `tb_bcast_net` | unicast, multicast, broadcast, last-round mask, backpressure |
| `tb_xfer_src`, `tb_xfer_dst` | address order, width splitting/packing, round markers, one word per cycle |
| `tb_mac_alu` | random signed MACCs, clear, reload |
| `tb_pe` | a two-pass 3D convolution in one PE, cycle count, reload and stall |
| `tb_cluster` | a 3D convolution in one cluster from 64-bit network words to psums |
| `tb_morph_top` | a whole layer end to end at reduced size (2×2 PEs, 4 lanes) |
| `tb_morph_top_full` | the same flow at the default size (6×16 PEs, 8 lanes, full buffers), checking all 13824 output psums |

The end-to-end tests count the four mechanisms in `ev` and fail if any never happens.

To run a testbench with Verilator 5, where `X` is the testbench name without the `tb_` prefix:

```
verilator --binary --timing --assert -Irtl rtl/morph_pkg.sv rtl/*.sv tb/tb_X.sv \
          --top-module tb_X -o sim
./obj_dir/sim
```

* The small testbenches build and run in under a minute.
* `tb_morph_top_full` takes about 5 minutes to compile and seconds to run.
* Memories are not reset. Run with `+verilator+rand+reset+2` to start them at random values.
