# A modular DMA engine for a PULP-style compute cluster

A DMA engine has to do three very different jobs. It has to accept transfer
requests from software. It has to turn complex requests, such as strided
multi-dimensional tiles, into simple ones. And it has to move bytes between
memories that use different on-chip protocols. This design gives each job its
own block, and the blocks talk through one small descriptor:

* **Front-ends** form the control plane. They take requests from software and
  produce descriptors.
* **Mid-ends** break or combine descriptors. Examples are multi-dimensional
  expansion and arbitration between several front-ends.
* **The back-end** forms the data plane. It executes plain 1D transfers
  ("copy *length* bytes from *src* to *dst*") of any length and alignment,
  between any pair of the protocol ports it was built with.

Every hop between these blocks is a ready/valid handshake carrying the same
1D descriptor, so the blocks can be recombined freely. A different engine
needs a different line-up of blocks, not a rewrite.

The RTL here builds the engine of an eight-core RISC-V compute cluster:

```
 core 0..7 reg bus ─► reg_32_3d ×8 ─┐
 host     reg bus  ─► reg_32_3d ×2 ─┤
                                    ▼
                     round-robin arbitration mid-end     (1 cycle)
                                    ▼
                     tensor mid-end, 3 dimensions        (0 cycles)
                                    ▼
         back-end: legalizer ─► transport layer          (2 cycles to first read request)
             AXI4 manager (64 bit, towards L2 / SoC)
             OBI read + OBI write (64 bit, towards the cluster's L1 TCDM)
             Init pseudo protocol (memory fill, read side only)
```

The top module is `idma_pulp_cluster_dma`. Its defaults are:

* 8 core front-ends and 2 host front-ends;
* 64-bit data;
* 32-bit addresses;
* 16 outstanding bursts per manager;
* 3-entry byte-lane buffers.

## The 1D descriptor (`idma_pkg`)

`idma_req_t` holds these fields:

* `src_addr`, `dst_addr` and `length` (32 bit each);
* `options`, which holds:
  * the source and destination protocol: `PROT_AXI`, `PROT_OBI` or `PROT_INIT`;
  * the Init pattern;
  * back-end options: a burst-length limit for each side, as log2 of beats;
  * `last`, set on the final 1D piece of a larger transfer.

For multi-dimensional transfers, each extra dimension adds an `idma_dim_t`
with `num_reps`, `src_stride` and `dst_stride`.

Inside the back-end, the legalizer emits `burst_t` records. Each record holds
an address, a byte count, the transfer's start offset within the bus word,
the protocol, and flags (last burst of the transfer, null burst, Init value
and mode).

## Back-end

The back-end is the hard part. It is where arbitrary byte streams meet bus
protocols that only understand aligned words and bounded bursts.

### Transfer legalizer (`idma_legalizer`)

The source and destination sides each have a state register holding the
current address and the bytes left. Each cycle, each side can emit one burst,
and its length is

    min(bytes_left, distance to the next boundary of its protocol)

The boundary depends on the protocol:

| protocol | boundary |
|---|---|
| AXI4 ("page splitter") | min(4 KiB, 256 beats × 8 B) = 2 KiB at 64 bit, aligned. If the side's burst limit is enabled, also 2^`burst_beats_log2` beats. |
| OBI ("single splitter") | one bus word. OBI has no bursts, so each access is one word. |
| Init | none. The whole transfer is one burst. |

The two sides run independently. A transfer from an OBI source to an AXI
destination produces many one-word reads but only a few long writes.

A descriptor is taken in the cycle the previous one's last bursts leave, so
back-to-back transfers have no gap.

Zero-length transfers cannot be legalized. Each one becomes a single *null*
write burst. It touches no bus, but still produces a completion in order.

### Transport layer (`idma_transport`)

```
read bursts ─► FIFO ─► {AXI rd | OBI rd | Init} ─► read mux ─► src shifter ─┐
                                                                            ▼
                                                          dataflow element (byte lanes)
                                                                            │
write bursts ─► FIFO ─► {AXI wr | OBI wr} ◄── write demux ◄── dst shifter ◄─┘
```

The read managers produce a *read-aligned* stream. Byte lane *i* of a beat
holds the byte at the bus address with low bits *i*, and a lane mask marks
the lanes that belong to the transfer.

The **source shifter** (`idma_shifter`) rotates each beat right by the
transfer's source offset, giving a stream aligned to the transfer start. The
**destination shifter** rotates it left by the destination offset. An
unaligned copy therefore costs nothing but two rotators; it needs no
read-modify-write.

The **dataflow element** (`idma_dataflow`) sits between the two shifters. It
is one small FIFO per byte lane, not one FIFO of whole beats:

* A read beat pushes only the lanes it carries.
* A write beat states which lanes it needs and pops only those.

This is what lets beats of different shapes on the two sides combine. For
example, a short first read beat can be combined with the next read beat to
fill one full write beat. It also decouples the two sides, so each side sees
back pressure only through its own handshake. And it cuts every
combinational path between the read and write managers.

**Order FIFOs** record, for every dispatched burst, its manager and offset.
The read mux and the write demux therefore switch between protocols from one
burst to the next without an idle cycle. A completion FIFO signals
`done_valid_o` once the last burst of a 1D transfer has been acknowledged:
by a B response for AXI, or by all responses for OBI.

### Protocol managers

* **`idma_axi_read`** issues one AR per burst, with INCR bursts of full-width
  beats, up to 16 outstanding. It tags each R beat with a lane mask and a
  last flag computed from the burst's bytes.
* **`idma_axi_write`** issues one AW per burst. It tells the dataflow element
  which lanes each W beat needs, drives W strobes from that, and counts B
  responses.
* **`idma_obi_read`** and **`idma_obi_write`** make one request per word. OBI
  cannot stall read data, so requests stop when the response queue is full;
  at most 16 accesses are open.
* **`idma_init_read`** generates data instead of reading it. The pattern is
  made of 32-bit words, word *k* counted from the start of the transfer:
  * `INIT_REPEAT`: every word is the value.
  * `INIT_INCR`: word *k* is value + *k*.
  * `INIT_PRNG`: word 0 is the value (the seed). Each following word is one
    step of a Galois LFSR with polynomial `0x80200003`.

  The init value travels in the descriptor's `src_addr` field.

### Timing

| path | cycles |
|---|---|
| back-end: accepting a descriptor to the first read request | 2 (one in the legalizer, one in the decoupling FIFO) |
| arbitration mid-end | +1 |
| tensor mid-end | +0 |

In steady state the back-end moves one full bus word per cycle. A 4 KiB
AXI→AXI copy takes 518 cycles. An 8 KiB L1→L2 copy (OBI to AXI) takes 1029
cycles: 1024 data beats plus the pipeline and memory latency.

Changing protocols between transfers costs nothing. In one test, 60
back-to-back 256 B transfers into AXI switch their source among OBI, AXI and
Init every time. They keep the AXI write data channel busy in every cycle:
1920 beats in 1920 cycles.

### Bus utilization with many small transfers

`tb_idma_frag_copy` measures how busy the bus stays when a 64 KiB buffer is
copied as many independent transfers issued back to back. It uses the
back-end at its defaults and three memory models:

| memory model | 8 B each | 32 B each | 1 KiB each | random 1 B–1 KiB, unaligned |
|---|---|---|---|---|
| 3-cycle SRAM, 8 slots | 99.9 % | 99.9 % | 99.9 % | 98.4 % |
| 13-cycle DRAM, 16 slots | 99.8 % | 99.8 % | 99.8 % | 98.3 % |
| 100-cycle HBM, 64 slots | 15.8 % | 61.2 % | 98.7 % | 97.2 % |

Every transfer costs the legalizer only one cycle, so one-word transfers
still reach full rate. The limit is then the number of bursts in flight. With
16 outstanding bursts and a 100-cycle memory, at most 16 beats of one-word
transfers can be in flight per ~103 cycles. To make small transfers fast on
such a memory, raise `NumAxInFlight`. Each extra slot adds one entry to each
decoupling and ordering queue.

The depth of the byte-lane buffers matters for unaligned copies. When the
source and destination offsets differ, a lane holds bytes from two read beats
until the write beat that drains the older one leaves. A full lane refuses a
push even in the cycle it is popped, because that keeps the read and write
sides free of combinational paths. So a third entry is needed for one beat
per cycle. With a depth of 2, the unaligned run above drops to 50 %.

## Mid-ends

### Tensor mid-end (`idma_tensor_nd`)

The tensor mid-end receives the base descriptor plus two outer dimensions. It
emits

    src = src_base + i2·src_stride2 + i3·src_stride3   (dst likewise)

with the inner index running fastest. The offsets are kept as running sums,
so the mid-end needs no multiplier.

The first 1D transfer is offered in the same cycle the 3D transfer arrives,
and then one follows per cycle. The 3D transfer is consumed together with its
last 1D piece, and only that piece carries `last`. Completions are filtered
on `last`, so each front-end sees one completion per 3D transfer.

A repetition count of 0 counts as 1.

For an Init source the strides are added to the init value, because the init
value travels in `src_addr`. Set the source strides to 0 to get the same
value in every row.

### Round-robin arbitration mid-end (`idma_rr_arb`)

The arbitration mid-end grants the first valid front-end at or after a
rotating pointer, then moves the pointer past the winner. The winner's
descriptor is registered.

A 16-entry queue remembers the front-end of each granted transfer. Because
the back-end completes in order, each completion is returned to the
front-end at the head of that queue.

## Front-end `reg_32_3d` (`idma_reg32_3d`)

Each core has its own copy of the register file, so cores never race while
programming a transfer. All registers are 32 bit, at byte offsets:

| offset | register | | offset | register |
|---|---|---|---|---|
| 0x00 | src_addr | | 0x18 | src_stride_2 |
| 0x04 | dst_addr | | 0x1C | dst_stride_2 |
| 0x08 | transfer_length | | 0x20 | num_reps_2 |
| 0x0C | configuration | | 0x24 | src_stride_3 |
| 0x10 | status (RO) | | 0x28 | dst_stride_3 |
| 0x14 | transfer_id (RO) | | 0x2C | num_reps_3 |

The configuration register is laid out as follows:

| bits | field | encoding |
|---|---|---|
| [1:0] | source protocol | 0 AXI4, 1 OBI, 2 Init |
| [3:2] | destination protocol | same as source |
| [5:4] | Init pattern | 0 repeat, 1 increment, 2 PRNG |
| [6] | limit source bursts | |
| [7] | limit destination bursts | |
| [11:8] | burst limit | log2 of beats |

**Reading `transfer_id` launches the programmed transfer** and returns its
ID, counting from 1. The grant of that read is held back until the
arbitration mid-end accepts the transfer, so a core simply stalls while the
engine is busy with other front-ends.

`status` returns the ID of the last completed transfer. Software waits with
`while (status < id)`.

The register bus uses `req`/`we`/`addr`/`wdata` with the grant in the same
cycle and `rvalid`/`rdata` one cycle later.

## Where this RTL departs from, or goes beyond, the published architecture

* **One back-end.** The published cluster diagram draws two one-directional
  back-ends (AXI read to OBI write, and OBI read to AXI write). The text
  speaks of one multi-protocol back-end, and that is what is built here. Its
  four ports also allow L2→L2, L1→L1 and Init transfers.
* **No error handler.** Bus error responses (`*_resp`, `*_err`) are ignored,
  which is equivalent to the "continue" policy. Abort and replay are not
  built.
* **No in-stream accelerator.** The dataflow element has no operator port.
* **Host front-ends.** The two host front-ends are the same `reg_32_3d` type
  as the core front-ends.
* **This design's own choices.** The following are not given by the
  architecture and were chosen here:
  * the register offsets and the configuration encoding;
  * the Init word size and LFSR polynomial;
  * the buffer depth of 3;
  * the per-lane buffer organisation;
  * the completion-routing queue;
  * treating zero repetitions as one.
* **Only this configuration is built.** Other front-ends (descriptor-based,
  instruction-based), other mid-ends (2D, real-time, address-split and
  distribution) and other protocols (AXI4-Lite, AXI4-Stream, TileLink) belong
  to other configurations of the architecture and are not built.
* **Outstanding transfers.** The default of 16 outstanding bursts hides
  latencies up to about 16 cycles even with one-beat transfers. Very
  high-latency memory (about 100 cycles) needs a larger `NumAxInFlight` to
  keep the bus busy with small transfers.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The bus models are:

* `tb_axi_mem`: an AXI4 memory with configurable latency and random stalls;
* `tb_obi_mem`: a two-port OBI memory with random grants.

Example, for the back-end:

```
verilator --binary --timing -Wno-fatal -j 0 -y rtl -y tb --top-module tb_idma_backend \
    rtl/idma_pkg.sv tb/tb_idma_backend.sv
./obj_dir/Vtb_idma_backend
```

`-y` lets verilator find every other module by its file name. The RTL
lints without warnings under verilator's default settings. Only the
testbenches mix integer widths in their reference models, hence
`-Wno-fatal`. For the whole engine, replace `tb_idma_backend` with
`tb_idma_pulp_cluster_dma`, which runs in under a second.

`tb_idma_pulp_cluster_dma` runs the whole engine at its default parameters:

* Ten concurrent processes each program their own front-end over the
  register bus.
* Each launches 24 random 3D transfers between L1 (OBI) and L2 (AXI), with
  Init fills, zero-length transfers, burst limits and 4 KiB crossings.
* The bus models insert random stalls.
* It polls `status`, then compares both memories byte by byte with a
  reference model.
* It also counts how often each mechanism occurred and fails if one never
  did.

The back-end testbench checks the 2-cycle latency and the full-rate copy
times quoted above.
