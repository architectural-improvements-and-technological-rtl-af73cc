# APEnet v5 network processor in SystemVerilog

APEnet is a network card for GPU clusters. Its nodes form a 3-D torus, and
each node has six point-to-point links: X+, X-, Y+, Y-, Z+ and Z-. A remote
put moves data from host or GPU memory on one node into host or GPU memory
on another node. Software only says what to send and where. The card
fetches the data, routes it across the torus and writes it into the
receiver's memory. Neither CPU touches the payload, and the receiving
driver is not involved.

At the heart of the card is the **Distributed Network Processor (DNP)**.
This repository is a synthesizable model of the DNP of the fifth generation
(v5). That generation talks to the host over PCIe Gen3 x8 through a vendor
core with AXI interfaces. It sends each link over four bonded transceivers
of a 28 nm FPGA.

The RTL covers the DNP logic between two kinds of vendor IP:
- the PCIe core on one side;
- the transceiver PHYs on the other side.

It does not cover:
- the vendor IP itself;
- the on-board soft microcontroller and its firmware.

These parts connect to the top module as plain ports. A behavioural model
of the PCIe core and of memory is provided for simulation.

## The node at a glance

```
            PHY lanes (4 x 32 bit + K flags per link)
   X  ──► torus_link ─┐
   Y  ──► torus_link ─┼──► router (5x5, dimension order, cut-through)
   Z  ──► torus_link ─┘        │ port 3 (host)   │ port 4 (GPU)
                               └──────┬──────────┘
                                core_interface  ◄──► PCIe core (AXI4 streams,
                                                     AXI4-Lite, DMA interrupts)
```

The node has three parts:

- **`torus_link`** (×3) turns packets into a framed stream of 128-bit link
  words and back. Each link word carries 4 lanes of 32 bits.
  - `sync_ctrl` aligns the four lanes.
  - `apelink_tx` and `apelink_rx` handle framing, byte stuffing, the CRC
    and stop/go flow control.
- **`router`** is a 5×5 crossbar. It connects the three links and the
  network interface's two local ports (host memory and GPU memory).
- **`core_interface`** is the network interface. On the transmit side it
  turns descriptors written by the driver into packets. On the receive side
  it turns arriving packets into DMA writes into registered buffers. It
  reports both as completion events.

Everything runs on one clock, and the reset `rst_n` is asynchronous and
active low. `apenet_pkg` holds all widths, codes and formats.

## Packets and flits

Inside the node, data moves as **flits**. A flit is 256 bits, which is the
width of the PCIe core's AXI streams, plus `sop` and `eop` flags.

A packet has a **header flit** (`hdr_t`) followed by 0 to 128 **payload
flits**, so at most one 4 KB page. The header holds:
- the destination node coordinates `{x,y,z}`;
- a flag selecting the destination's GPU port rather than its host port;
- the destination *virtual* address;
- the payload length in bytes;
- the source coordinates.

Lengths are multiples of 32 bytes. To move more than a page, the driver
posts one descriptor per page: a scatter-gather list in the transmit ring.

## Torus link: getting words across four lanes

### Lane alignment (`sync_ctrl`)

The four serial lanes of a link arrive with different delays. The vendor PHY
has already found the byte and word boundaries, but the lanes can still be a
few clocks apart.

While the link comes up, the transmit side sends the 8B/10B control
character **K28.3** on every lane for `SYNC_HOLD` clocks. It does this
after the PHY reports both its transmit and receive sides ready.

On the receive side, each lane has a small **deskew FIFO**:
- A lane starts writing its FIFO with the first word after its run of K28.3
  ends.
- One read enable is shared by all four FIFOs. It is asserted once none of
  them is empty.

From then on, the four words read together are words that were sent
together. The largest lane skew this corrects is `DESKEW_DEPTH - 1`
clocks. `link_up` rises once the node has finished its own sync pattern and
its receiver is aligned.

### Framing, stuffing and CRC (`apelink_tx`, `apelink_rx`)

A flit is sent as two 128-bit link words. A packet on the wire looks like
this:

```
SOP | hdr.lo hdr.hi | d0.lo d0.hi | ... | EOP | CRC
```

- `SOP`, `EOP` and `ESC` are three reserved 128-bit patterns.
- A data word that happens to equal one of them is sent as `ESC` followed by
  the word. The receiver drops the `ESC` and takes the next word as data.
- The CRC is CRC-32 (polynomial 04C11DB7, MSB first). It covers the data
  words after de-stuffing.
- A packet of N flits with no reserved words takes exactly 2N+3 link
  clocks.

Between packets the link sends idle words: K28.5 in every lane.

Flow control is stop/go, not credits:
- When a receiver's buffer holds more than `RX_DEPTH - STOP_MARGIN` flits,
  its node sends an XOFF word (K28.0 in all lanes) on the opposite
  direction of the link.
- When the buffer drains, the node sends an XON word (K28.2 in all lanes).
- A transmitter that has received XOFF sends only idle words.
- Flow-control words may appear anywhere in the stream, including inside
  a packet, because they are K characters.

`STOP_MARGIN` covers the round trip of the cable plus the lane logic.

A CRC mismatch raises `crc_err` for one clock and increments `err_count`.
The packet itself has already been forwarded (cut-through), so it is
delivered as received. **No retransmission exists.** Framing errors are
counted the same way:
- an EOP in mid-flit;
- an SOP inside a packet.

## Router

The router has five ports: 0 = X, 1 = Y, 2 = Z, 3 = host, 4 = GPU.

**Routing is dimension-ordered.** A packet leaves on X until its x
coordinate matches the node's, then on Y, then on Z. At its destination it
goes to port 4 if the header's GPU flag is set, otherwise to port 3. The
routing decision is made on the header flit at the head of each input
buffer.

**Switching is virtual cut-through:**
- Each input buffer holds `IN_DEPTH` = 136 flits, enough for a whole
  largest packet (129 flits).
- A blocked packet therefore never holds links behind it.
- Once an output is granted to an input, it stays with that input until
  the `eop` flit has passed. Packets never interleave.

A round-robin arbiter per output chooses among competing inputs. Each
output moves one flit per clock, so all five can stream at once. The test
checks that five flows on a permutation run at full rate together.

The torus has wrap-around links, and the router has no virtual channels, so
routing deadlock on a ring that is full is not prevented. See "Limits"
below.

## Network interface (`core_interface`)

The PCIe core gives the DNP four pieces:
- four 256-bit AXI4 stream inputs (memory to device);
- two 256-bit AXI4 stream outputs (device to memory);
- DMA engines that the DNP programs through a 32-bit AXI4-Lite master and
  that signal completion by interrupt;
- an AXI4-Lite slave through which the host reaches the DNP's registers.

The network interface is built around that.

| stream | FIFO | contents |
|---|---|---|
| in 0 | COMMAND | transmit descriptors fetched from the tx ring |
| in 1 | uC | lines for the microcontroller (`uc_*` ports) |
| in 2 | HOST TX | payload read from host memory |
| in 3 | GPU TX | payload read from GPU memory |
| out 0 | RX | received payload being written to memory |
| out 1 | EQ | completion events being written to the event queue |

### Sending

The driver sends as follows:
1. It writes 32-byte descriptors into the **tx ring**, a circular buffer in
   host memory. A descriptor gives the source physical address, the
   length, the destination node, the destination virtual address and the
   host/GPU flags.
2. It then writes the ring's write pointer (`TX_RING_WRITE`). Several
   descriptors can be posted with a single pointer update.

On the device side:
- **`multi_pkt_inst`** compares the write pointer with its own read
  pointer (`TX_RING_READ`). It fetches *all* new descriptors with **one**
  DMA, limited by three things:
  - the end of the ring;
  - the free space in the COMMAND FIFO;
  - `MAX_BATCH`.
- **`dma_ctrl`** takes one descriptor at a time. For each one it:
  1. queues a DMA that reads the source page into the HOST TX or GPU TX
     FIFO;
  2. sends the header flit on the router's host or GPU port;
  3. forwards the payload flits as they arrive;
  4. queues a "sent" event.

### Receiving and address translation

Received packets come from router ports 3 and 4, one whole packet at a
time. `dma_ctrl` looks up the header's virtual address in the **TLB**
(`tlb`), a fully associative table of 4 KB pages. Each entry holds a
virtual page, a physical page and an owner ID, and the driver registers
entries through registers.

A hit does two jobs at once:
- **buffer search:** does this address belong to a registered buffer?
- **virtual-to-physical translation.**

What happens next:
- **Hit, and the payload stays inside the page:** an Rx DMA is queued to
  the physical address, and the payload is pushed into the RX FIFO, which
  the DMA engine drains.
- **Otherwise:** the payload is discarded and an error event is raised.
  This covers a TLB miss and a payload that would run past the end of
  its page.

The "received" event is held back until the DMA IF reports the Rx DMA
complete, so software never sees an event before its data.

### Events

Sent, received and error events share one **event queue** in host memory.
Each event is 32 bytes: type, virtual address, length. A CPL DMA writes
each event at `EQ_BASE + 32*EQ_WRITE`, and then `EQ_WRITE` advances.
Nothing is written while the queue is full, that is while the next write
position equals `EQ_READ`, which software advances.

### DMA IF (`dma_if`)

Four request queues feed the DMA engines:
- **Cmd:** descriptor fetch.
- **Tx:** payload read.
- **Rx:** payload write.
- **CPL:** event write.

Queue *q* uses DMA engine *q*. The channel-manager FSM serves the queues
one request at a time, in round-robin order. For each request it:
1. writes the engine's address-low, address-high, length and control
   registers over AXI4-Lite, each as one write with its response;
2. waits for that engine's interrupt;
3. pulses `done[q]`.

The engine register layout, at offset `engine*16`, is:

| offset | register |
|---|---|
| +0 | address low |
| +4 | address high |
| +8 | length in bytes |
| +C | control: `{stream[3:2], to_host[1], start[0]}` |

This layout belongs to this design, so the PCIe core's real layout needs
an adapter.

With an always-ready slave, programming takes 9 clocks per request.

### Registers (`internal_regs`, AXI4-Lite slave)

| offset | register | | offset | register |
|---|---|---|---|---|
| 00 | ID = A9E5_0005 (ro) | | 40/44 | TLB_VA lo/hi |
| 04 | NODE_COORD {x,y,z} | | 48/4C | TLB_PA lo/hi |
| 08/0C | TX_RING_BASE lo/hi | | 50 | TLB_PID |
| 10 | TX_RING_SIZE (entries) | | 54 | TLB_CMD: bit31 valid, index (wo) |
| 14 | TX_RING_WRITE | | 60 | LINK_STATUS: link_up[2:0] (ro) |
| 18 | TX_RING_READ (ro) | | 64/68/6C | CRC errors X/Y/Z (ro) |
| 20/24 | EQ_BASE lo/hi | | 70 | descriptor DMAs issued (ro) |
| 28 | EQ_SIZE (entries) | | | |
| 2C | EQ_WRITE (ro) | | | |
| 30 | EQ_READ | | | |

To register a page:
1. Write the virtual address, the physical address and the owner ID.
2. Write `TLB_CMD` with bit 31 set and the entry index.

Writing `TLB_CMD` with bit 31 clear invalidates the entry.

## Where this follows the published design and where it does not

**Taken from the published APEnet v5 design:**
- The three-part structure: torus link, router, network interface.
- Four bonded lanes per link.
- Deskew FIFOs written per lane after K28.3 and read together once none is
  empty.
- A light word-stuffing link protocol with a CRC.
- A 5×5 switch with dimension-ordered routing and virtual cut-through.
- 256-bit AXI streams, four in and two out, with the six FIFOs named
  above.
- A DMA IF with four request queues, served one at a time, that programs
  the PCIe core's DMA engines over AXI4-Lite and waits for their interrupt.
- Batched descriptor fetch driven by tx_ring_read and tx_ring_write.
- One descriptor per 4 KB page.
- A TLB that does buffer search and virtual-to-physical translation.
- A single event queue shared by "sent" and "received" events.

**This design's own choices.** The published description does not give
these:
- The framing words.
- The CRC polynomial.
- The flow-control scheme and its codes.
- The packet, descriptor and event formats.
- All register maps.
- The port numbering and the X→Y→Z order.
- The arbitration policy.
- Every buffer and FIFO depth, and the TLB size (64).
- Placing the TLB inside the network interface, next to the packet engine.
- Using six of the PCIe core's eight AXI streams (four in, two out).
- The rule that drops a packet running past its page.
- Delivering packets that fail the CRC.
- Holding each "received" event until its data are written.

**Not built.** These parts connect as ports:
- the PCIe core and its DMA engines;
- the transceiver PHYs, their reconfiguration and reset controllers;
- the soft microcontroller and its RDMA firmware: the software path for
  translation and anything the TLB misses;
- the on-board memory controller.

The original block diagram also names a fault manager, a collective
communication block and a GPU I/O accelerator without describing them.
They are absent.

## Limits worth knowing

- **No deadlock avoidance on the torus rings.** Dimension-order routing is
  deadlock-free on a mesh, but not around a ring's wrap-around link when
  every buffer on the ring is full. Virtual channels or a dateline would
  be needed for heavy traffic on large rings.
- **No link-level retry.** A CRC error is counted and the packet is
  delivered as received.
- **TLB size.** With 64 entries, at most 256 KB of receive buffer can be
  registered at once. Larger transfers need `TLB_ENTRIES` raised or pages
  re-registered as the transfer runs.
- **One DMA at a time.** This follows the sequential description. Data
  throughput is therefore bounded by the PCIe core's per-transfer
  overhead, not by this logic, which moves 32 bytes per clock.
- **Clocks.** Rates depend on the clock, which the published design does
  not fix. At 175 MHz the router moves 5.6 GB/s per port. A link's four
  lanes at 11.3 Gb/s (8B/10B) need the 128-bit link word at about 283 MHz.
  A real build would put the links on the PHY clocks with clock-domain
  crossing FIFOs; here everything is on one clock.

## Files

`rtl/` (all synthesizable, one module or package per file):

| file | content |
|---|---|
| `apenet_pkg.sv` | widths, K codes, framing words, structs, CRC-32 and routing functions |
| `sync_fifo.sv`, `rr_arbiter.sv` | FIFO with count and round-robin arbiter used throughout |
| `sync_ctrl.sv` | lane deskew and sync-pattern sender |
| `apelink_tx.sv`, `apelink_rx.sv` | link framing, stuffing, CRC, stop/go |
| `torus_link.sv` | one link channel |
| `router.sv` | 5×5 cut-through switch |
| `tlb.sv` | page table for buffer search and translation |
| `dma_if.sv` | request queues and DMA channel manager |
| `multi_pkt_inst.sv` | batched descriptor fetch |
| `dma_ctrl.sv` | packet engine: transmit, receive, events |
| `internal_regs.sv` | host-visible registers |
| `core_interface.sv` | the network interface |
| `apenet_dnp.sv` | top: three links, router and network interface |

`tb/` has one self-checking testbench per block, plus three helpers:
- `pcie_host_model.sv`: a model of the PCIe core, its DMA engines and
  memory;
- `dnp_node.sv`: one node plus that model;
- `lane_delay.sv`: a lane with delay and bit-flip injection.

`tb_apenet_dnp` is the system test. It builds two nodes at (0,0,0) and
(1,0,0):
- Their X links are crossed, with a different delay on every lane.
- Their Y and Z links loop back to themselves.
- Both nodes use the default parameters.

It runs these cases:
- a batch of remote puts, one of which contains a reserved framing word;
- a local loop;
- GPU to GPU;
- a put to an unregistered address;
- a six-page transfer while the receiver's memory writes are stalled,
  which forces XOFF flow control and output contention in the router;
- a single bit error on a lane.

It counts each of these mechanisms and fails if any never happened.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/apenet_pkg.sv tb/tb_apenet_dnp.sv \
  --top-module tb_apenet_dnp -o sim
./obj_dir/sim
```

Replace `tb_apenet_dnp` with any other `tb_*` module to test one block. Each
testbench ends with `TB_RESULT checks=N failures=M`. Each also has a
watchdog that reports a failure if the simulation hangs. The whole system
test takes well under a second.
