# A torus network interface that reads and writes GPU memory directly

Moving a GPU buffer to another node normally costs two extra copies: the GPU
copies the data into host memory, the network adapter sends it from there, and
the receiver copies it back into its GPU. NVIDIA GPUs since Fermi expose a
peer-to-peer protocol on PCI Express that lets another device read and write
GPU memory directly. This RTL models the packet-processing core (the "DNP",
Distributed Network Processor) of an FPGA-based 3D-torus network adapter
built around that idea, following the published description of the APEnet+
card and its GPU peer-to-peer extension.

The core has three parts:

* a **router** that switches packets between six torus links (X+, X-, Y+, Y-,
  Z+, Z-) and two local ports, with dimension-ordered routing;
* a **transmit side** that turns per-packet descriptors into PCIe reads of
  host or GPU memory and packets. For GPU memory the reads are peer-to-peer
  reads, issued by a hardware request generator at a fixed pace and throttled
  by the fill level of the on-board FIFOs. Their GPU virtual source addresses
  are translated through the GPU page table on the way out;
* a **receive side (RDMA)** that checks each arriving packet against the list
  of registered buffers, translates its 64-bit virtual destination address
  through a 4-level page table (4 KB pages for host memory, 64 KB pages for
  GPU memory) and writes the payload over PCIe. GPU memory is written through
  a sliding 64 KB window, which is moved first whenever the target page
  changes.

Writing into GPU memory is almost the same as writing into host memory; the
window is the only difference. Reading from GPU memory is the hard part: the
GPU answers reads slowly (about 1.8 us for the first data), so good bandwidth
needs many reads in flight. Yet the data of every read must find room in the
transmit buffer when it arrives. Most of this document is about that
balance.

## Block map

```
            torus links X+ X- Y+ Y- Z+ Z-   (flit streams, ports of dnp_top)
                          |  |  |  |  |  |
                  +-------------------------------+
                  |          dnp_router           |   dor_route per input
                  |   8 x 8, wormhole, rr_arbiter |   rr_arbiter per output
                  +-------------------------------+
                    port 6 ^  | port 6      ^ port 7
                 (host TX) |  v (delivery)  | (GPU TX)
        +------------------+  +--------+    +---------------------+
        | tx_pkt_merge     |  | rx_rdma|    | tx_pkt_merge        |
        | hdr FIFO  data   |  | buf_list    | TX FIFO HD  TX FIFO |
        | (64)  FIFO 32 KB |  | HOST_V2P    | GPU (64)    DATA GPU|
        +------------------+  | GPU_V2P|    |             32 KB   |
              ^       ^       +--------+    +---------------------+
              |       | host read data  |          ^        ^ GPU read data
        host reader   |                 |  gpu_p2p_tx -> P2P REQUEST FIFO -> gpu_rd_xlate -> GPU
        (gpu_p2p_tx,  |                 |    ^ almost-full of all three FIFOs
         no pacing)   |                 v
                           PCIe writes (host / GPU / window move)
```

Outside `dnp_top`, and reached through its ports, are the torus link
transceivers, the PCIe core and the micro-controller firmware. The firmware
registers buffers, fills the page tables, sets the table roots and hands
out transmit descriptors.

## Packets

Everything inside the core moves as 128-bit flits with a `last` bit. A
packet is one header flit followed by `len/16` payload flits; a header-only
packet has `last` set on the header. Payloads are at most 4 KB and a
multiple of 16 bytes.

| header bits | field |
|---|---|
| 63:0    | destination virtual address (64-bit unified virtual address) |
| 76:64   | payload length in bytes |
| 92:77   | process ID of the destination buffer |
| 104:93  | destination node, x / y / z, 4 bits each |
| 127:105 | reserved |

`apenet_pkg` defines this as `pkt_hdr_t`. It also defines the transmit
descriptor `tx_desc_t` (source address: GPU virtual or host physical; length, destination,
process ID, destination virtual address), the read request `rd_req_t` and
the receive-side write `pcie_wr_t`.

## Reading GPU memory: `gpu_p2p_tx`

This is the third-generation request generator of the source design. For
each descriptor it does three things:

1. It pushes the packet header into the TX header FIFO as soon as the
   descriptor is accepted.
2. It splits the payload into 128-byte reads and pushes them into the P2P
   request FIFO, at most one every `REQ_INTERVAL` = 16 cycles. That is 80 ns
   at 200 MHz, and 128 B / 80 ns = 1.6 GB/s, the GPU's peer-to-peer read
   ceiling.
3. It moves on to the next descriptor in the same cycle as its last read,
   without waiting for data. The pace holds across packet boundaries.

There is no pre-fetch window: reads run ahead of the data as far as the
buffers allow. Earlier generations of the source design had a 4-32 KB
window; they are not modelled. A read that is due is held back (`fc_stall`)
when any of these holds:

* the **TX data FIFO** is almost full;
* the **P2P request FIFO** is almost full;
* one more read would make the data still owed by the GPU exceed
  `MAX_OUTSTANDING x REQ_BYTES` (32 x 128 B = 4 KB).

A new descriptor is also refused while the **TX header FIFO** is almost full.

The GPU's read data comes back as PCIe completions, and those cannot be
refused. The data FIFO's almost-full level is therefore
`TXDATA_WORDS - MAX_OUTSTANDING * REQ_BYTES/16` = 2048 - 256 words. When
the flag rises, at most 4 KB can still arrive, and there is exactly 4 KB of
room. `dnp_top` asserts that read data never meets a full FIFO. If you
change `REQ_BYTES` or `MAX_OUTSTANDING`, this relation follows
automatically. If you give the FIFO its own threshold, keep the headroom.

Why 32: the GPU takes about 1.8 us (360 cycles) to return the first data of
a read. At one read every 16 cycles, about 23 reads are in flight before the
first one completes. A limit below that would set the rate instead of the
pacing. With 16, for example, the rate would be 128 words per 368 cycles,
about 1.1 GB/s. At 32, the pacing rules and the core reads GPU memory at
1.6 GB/s once messages are long. A 4 KB message is latency-bound at about
0.9 GB/s, 32 KB reaches 1.47 GB/s and 1 MB reaches 1.6 GB/s.

The descriptor's source address is a GPU **virtual** address.
`gpu_rd_xlate` sits between the P2P request FIFO and the PCIe core. It
translates each read on its way out, through the transmit side's copy of
the GPU page table; the same table writes fill both copies. It keeps the
last page it translated, so it walks the table (5 cycles) only when the
reads move to a new 64 KB page. At one read per 16 cycles, a walk never
slows the stream. A read that straddles a page is split in two. An
unmapped page raises `gtx_xlate_fault`. The read still goes out, to
physical page 0, so the transmit buffer's accounting stays consistent.

Data returns in request order. The GPU's words are written straight into
the data FIFO by `dnp_top`; `gpu_p2p_tx` only counts them (`data_word`).
`tx_pkt_merge` then rebuilds packets: it takes a header and forwards
`len/16` words from the data FIFO behind it.

Host memory is read by a second `gpu_p2p_tx` instance with
`REQ_INTERVAL = 1`. It has its own header FIFO and 32 KB data FIFO and
injects on router port 6; GPU packets use port 7.

## Receiving: `rx_rdma`, `buf_list`, `v2p_walker`

Router port 6 delivers every packet addressed to this node. For each packet,
`rx_rdma` goes through these states:

1. **Header.** It latches the virtual address, length and process ID.
2. **Buffer lookup** (`buf_list`). It scans the registered buffers one entry
   per cycle, like the source design's list traversal, so lookup time grows
   linearly with the list position. A match needs the same process ID and
   `[va, va+len)` inside the buffer. The entry also says host or GPU memory,
   and which GPU. No match: the packet is drained and `pkt_drop` pulses.
3. **Translation** (`v2p_walker`; one instance is HOST_V2P, one is GPU_V2P).
   A 4-level walk over the page-number bits, cut into four equal fields
   (13 bits for 4 KB pages, 12 bits for 64 KB pages). It does one table read
   per cycle, so a successful walk always takes 5 cycles. An invalid entry
   ends the walk with a fault and the packet is drained.
4. **Window** (GPU only). If the translated 64 KB page is not the one the
   window is on, a `GPU_WINDOW` command goes out first (`win_switch`).
5. **Data.** One write per payload word at page base + offset, carrying the
   flit unchanged. Leaving a page in mid-packet sends the engine back to
   step 3 for the next page.

Table words: bit 0 is valid. At levels 1-3, bits [TW:1] hold the word
address of the next table in the RAM. At the leaf, bits [63:page] hold the
physical page. The firmware writes the tables through `htw_*` / `gtw_*` and
gives each map's first-level table with `host_root` / `gpu_root[g]`. At
their default size, the RAMs hold one table per level. That covers one
256 MB region of GPU virtual space and one 32 MB region of host virtual
space. The GPU region holds the buffers sent from as well as those received
into, because both sides use the same map. For more, raise the `TABLE_WORDS` default of `v2p_walker`.

## Routing: `dor_route`, `rr_arbiter`, `dnp_router`

Each input computes its output from the header:

* X is corrected first, then Y, then Z, each the shorter way round its ring
  (plus on a tie);
* a packet at its destination goes to port 6.

Each output has a round-robin arbiter. The winner keeps the output until its
`last` flit has passed (wormhole switching), so packets never interleave.
The router holds no buffers: a flit crosses it in the cycle it is offered if
its output is free or already its own. The default torus is 4 x 2 x 1, the
eight-node test cluster of the source design; coordinates are 4 bits per
dimension.

## Timing at a glance (200 MHz assumed)

| operation | cycles |
|---|---|
| GPU read requests | one per 16 (80 ns), 128 B each |
| host read requests | one per cycle, 128 B each |
| router traversal | combinational (0), one flit per cycle per output |
| buffer lookup | position of the match + 1; a miss takes the list size (64) |
| translation | 5 per page (fewer on a fault) |
| GPU source translation | 1 per read on the held page, +5 on a new page |
| GPU window move | 1 write slot |
| receive data | one 16-byte write per cycle when not stalled |

## How far this follows the source design

Taken from the source design:

* the router's six torus ports and two local ports;
* dimension-ordered static routing;
* the 32 KB transmit buffer and the three throttling FIFOs (TX data, TX
  header, P2P request);
* hardware GPU read requests every 80 ns, with unlimited pre-fetch;
* the buffer list and its linear traversal;
* the 4-level host and GPU page tables, with 4 KB and 64 KB pages;
* the GPU write window;
* 64-bit virtual destination addresses in the packet header.

This design's own choices are everything the description leaves open:

* the flit width and the header layout;
* the 200 MHz clock that turns 80 ns into 16 cycles;
* 128-byte reads, chosen because 128 B / 80 ns matches the measured
  1.5-1.6 GB/s;
* the 4 KB limit on outstanding reads;
* wormhole switching and round-robin arbitration;
* all table formats and sizes;
* dropping packets that match no buffer;
* one PCIe write per 16 bytes.

The block diagram of the source design labels the switch "7x7", while its
text counts 6 + 2 = 8 ports; this RTL has 8.

The largest departure is **where the work is done**. In the source design,
buffer-list traversal, address translation and transmit-side source
translation are firmware on a soft micro-controller, and that firmware is
the measured bottleneck: about 3 us per received packet. Here the buffer
lookup and both translations are hardware. GPU transmit descriptors carry
GPU virtual source addresses. Host transmit descriptors carry physical
ones, as the host driver produces them.

Not modelled: the torus link logic and transceivers (4 lanes at 8.5 Gbps
each), the PCIe core, the micro-controller, the collective-communication
block, the memory controller and the Ethernet port. The links and the PCIe
core appear as plain streams on `dnp_top`'s ports. The GPU peer-to-peer
page descriptors' protocol tokens and the exact PCIe form of a window move
are not public; `GPU_WINDOW` is an abstract command. The earlier
request-generator generations (software requests, fixed pre-fetch window)
are left out.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/apenet_pkg.sv rtl/*.sv \
    tb/tb_dnp_top.sv --top-module tb_dnp_top -Mdir obj_top -o sim
obj_top/sim
```

Swap in any `tb_<module>` in place of `tb_dnp_top`. `tb_dnp_top` runs the
whole core at its default sizes (about 80 000 cycles, seconds of run time)
as node (0,0,0). It drives these traffic patterns:

* GPU-to-GPU loop-back of 64 KB in 4 KB packets, across two GPU pages;
* host-to-host loop-back in 1 KB packets crossing 4 KB pages;
* GPU packets to a neighbour;
* link traffic for this node;
* a pass-through packet;
* an unregistered packet.

It checks every word written against the page tables and the source data,
and it fails if any of these mechanisms never happened: read-request
throttling, throttling by the full transmit buffer, a window move, a
page-crossing retranslation, router contention or a drop.

`tb_gpu_read_bw` measures GPU read bandwidth through the whole core for
messages from 4 KB to 1 MB, with packets flushed out of a link. It checks
1.5-1.6 GB/s and 640-700 us for 1 MB. Typical results: 0.94 GB/s at
4 KB, 1.47 GB/s at 32 KB and 1.60 GB/s at 1 MB (657 us).

`tb_hsg_two_node` joins two full-size cores through one X link, in both
directions, and runs a halo exchange: each node sends six 128 KB messages
from its GPU into the other's GPU buffers, and both nodes send at the same
time. The receive buffers start mid-page and are scattered over physical
pages. The testbench checks every word and the window discipline, and
expects the exchange to finish within 560 us. Typical result: 768 KB each
way in 493 us, with 13 window moves per node.

The block testbenches cover:

* `tb_gpu_p2p_tx`: the exact 16-cycle request spacing, and that no request
  is issued under almost-full;
* `tb_gpu_rd_xlate`: page-boundary splits, one walk per page change, faults
  and the held-page rate;
* `tb_buf_list`: the linear lookup time;
* `tb_v2p_walker`: the 5-cycle walk;
* `tb_dor_route`: every source/destination pair on 4x2x1 and 5x3x4 tori;
* `tb_dnp_router`: packet integrity under random back-pressure on all eight
  ports.

Parameters worth changing:

* `dnp_top`: `DIM_X/Y/Z`, `TXDATA_WORDS`, `REQ_INTERVAL`, `REQ_BYTES`,
  `MAX_OUTSTANDING`, `N_BUF`, `N_GPU`;
* `v2p_walker`: `TABLE_WORDS`.

All memories are plain arrays. The storage is not reset, so the firmware
must clear (or fully write) the page-table RAMs it uses, as the testbenches
do.
