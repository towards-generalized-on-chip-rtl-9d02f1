# Multicast NoC and peer-to-peer accelerator communication for a tiled heterogeneous SoC

Accelerators in a tiled system-on-chip usually talk to each other through
shared memory. A producer writes its result to DRAM, and each consumer reads
it back. With one producer and many consumers, the same data crosses the
memory controller once per consumer, and the memory tile becomes the
bottleneck.

This design removes that round trip:

- **Peer-to-peer (P2P) transfers.** A consumer's read is served straight
  from the producer's local memory.
- **Network-level multicast.** One producer burst reaches up to 16 consumers
  as a single packet. The packet is copied inside the routers, only where the
  paths to the consumers split.

The accelerator keeps a plain, memory-like DMA interface. It picks the
communication mode with a 5-bit `user` field on each request, so the same
accelerator can read from memory in one burst and from a peer in the next.

The RTL covers:

- the multicast router and its mesh;
- the DMA controller of the accelerator socket, which turns DMA and P2P
  requests into packets;
- a TLB, the P2P source table and the configuration registers;
- an IDMA/CDMA front end that lets an accelerator queue and poll its own
  transfers;
- a traffic-generator accelerator;
- a 5×4 top level with 17 accelerator tiles on two NoC planes.

The processor, memory and I/O tiles are left as ports. A behavioural memory
model is used in simulation.

## Packets and the multicast header

A flit is `DATA_W + 2` bits wide: a head bit and a tail bit above a
`DATA_W`-bit payload. The default `DATA_W` is 256. A packet is a head flit,
any number of body flits and a tail flit; a single-flit packet has both bits
set. The head payload is packed from bit 0 upwards (`rtl/noc_pkg.sv`):

| bits             | field                                          |
|------------------|------------------------------------------------|
| 2:0              | source x                                       |
| 5:3              | source y                                       |
| 10:6             | message type                                   |
| 18:11            | reserved; bits 13:11 carry the word size       |
| 23:19            | number of destinations (`ndest`)               |
| 24+7j .. 30+7j   | destination j: {valid, y[2:0], x[2:0]}         |

The number of destinations is limited by the header width:

`MAX_DEST = min(16, (DATA_W - 24) / 7)`

This gives 5 destinations on a 64-bit NoC, 14 on a 128-bit NoC and 16 on a
256-bit NoC. The cap of 16 is the largest number the P2P user-field encoding
can name.

The message types are:

| code | type       | plane    |
|------|------------|----------|
| 1    | DMA read   | request  |
| 2    | DMA write  | request  |
| 3    | DMA data   | response |
| 4    | P2P request| request  |
| 5    | P2P data   | response |

Requests travel on one mesh and data replies on the other. A consumer waiting
for data therefore cannot block the requests that would produce it.

## The multicast router (`mcast_router`)

Each of the five input ports (N, S, W, E, local) has a 4-flit FIFO. Routing is
dimension-ordered: first along x, then along y. Row 0 is the top row, and
NORTH decreases y.

**Lookahead routing.** Each flit carries a 5-bit port mask next to it. The
upstream router has already computed, for every destination, which output this
router must use. The local port computes its own mask. A router therefore
spends no cycle on route computation, and a flit crosses a router in one cycle.
The mesh testbench measures this: 7 hops take 8 cycles from injection to
ejection. For every copy it sends out, a router recomputes the mask for the
next router with one `lookahead_route` instance per destination slot.

**Forking.** An output copy of a multicast head keeps only the destinations
that leave through that port. The router clears the valid bits of all the
others and rewrites `ndest` for that branch. Each branch is thus a correct
multicast packet, or unicast packet, of its own.

**Allocation.** A packet's head waits until every output it needs is free. It
then claims all of them at once ("all or nothing"), with a rotating priority
among inputs. The claimed outputs stay held until the tail has passed. Within
a packet the outputs are served asynchronously: each flit is popped only when
all its copies have gone out. A `sent` mask records which outputs have already
taken the current flit, so one slow branch does not make the others repeat.

The paper describes these parts: the destination list in the head flit, the
lookahead logic replicated per destination, and forwarding to several outputs
in parallel. This design chose the rest: the pruning of each branch's header,
all-or-nothing allocation and the `sent` mask.

**Why heads wait for all outputs.** Holding some outputs while waiting for
others would let two packets deadlock in the same router. Across routers this
is not enough. Two wormhole multicast trees that each hold a link the other
needs can still deadlock. The design does not prevent this (see Limitations).

## The accelerator socket: `dma_ctrl`

The accelerator sees two request/response channel pairs, one for reads and one
for writes. Their fields are:

- `ctrl_index` (32 bits): the address, counted in beats;
- `ctrl_length` (32 bits): beats;
- `ctrl_size` (3 bits);
- `ctrl_user` (5 bits);
- `chnl_data` (`DATA_W` bits).

The meaning of `user`:

| channel | user = 0 | user = 1 | user = n > 1 |
|---------|----------|----------|--------------|
| read    | read from memory | P2P read from the tile in P2P table entry 1 | P2P read from table entry n |
| write   | write to memory | P2P write, to one consumer | P2P write, multicast to n consumers |

**Memory mode.** The virtual address `index × (DATA_W/8)` goes through the TLB.
A DMA read sends a two-flit request to the memory tile and streams the DMA
data replies into the read channel. A DMA write sends a head, an address flit
and the data flits.

**P2P mode (pull).** A transfer is pulled by the consumers, never pushed:

1. The consumer's `dma_ctrl` looks up the producer's coordinates in its P2P
   table.
2. It sends a P2P request carrying the length it wants.
3. The producer queues incoming requests. The queue holds 16 entries and
   always accepts, so a request never blocks the request plane.
4. When its accelerator issues a P2P write with `user = n`, the producer waits
   until n requests from n distinct consumers are queued.
5. It then sends the data as one multicast packet. The head lists all n
   consumers.
6. Each packet is at most the smallest amount any of those consumers still
   wants.

The paper describes waiting for the given number of consumer requests and
then sending one multicast packet to all of them. Splitting a transfer by the
requested lengths is this design's addition. A consumer that asked for less
than the producer is writing is therefore never sent more than it requested. The rest of the write goes in further
packets, to further requests. This gives backpressure from the slowest
consumer without any extra message type.

## IDMA/CDMA (`idma_engine`)

The IDMA/CDMA unit is a small command port between the accelerator and its
socket:

- An **IDMA** command starts a read into the private local memory (PLM) or a
  write out of it. Its fields are direction, length, size, user, index and PLM
  address. The command returns a tag, from 4 tags.
- A **CDMA** command polls a tag. It answers FREE, PENDING or DONE. A DONE
  answer also releases the tag.

The engine runs one read and one write at a time. For writes it reads ahead
from the PLM into a two-entry buffer, so a synchronous SRAM read does not
cost a bubble on every beat. The PLM is 4 KB: 128 words of 256 bits, with one
write port and one synchronous read port.

## Traffic generator and accelerator tile

`traffic_gen` is an accelerator that computes the identity function. It moves
`total_len` beats in bursts of at most `burst_len` beats (4 KB at most). For
each burst it:

1. issues an IDMA read into the PLM;
2. polls that read until done;
3. issues an IDMA write of the same words;
4. polls that write until done.

When the last burst is written, it pulses `done`.

`acc_tile` puts `traffic_gen` together with:

- the TLB: 16 entries of 1 MB pages, 12-bit physical page numbers;
- the 32-entry P2P source table;
- the configuration registers;
- `dma_ctrl`.

Register map (word addresses on the 8-bit configuration bus):

| addr    | name      | meaning |
|---------|-----------|---------|
| 0x00    | CMD       | bit 0 = start; a start also clears the interrupt |
| 0x01    | STATUS    | {busy, irq} |
| 0x02    | SRC_USER  | read `user` |
| 0x03    | DST_USER  | write `user` |
| 0x04    | RD_BASE   | read index |
| 0x05    | WR_BASE   | write index |
| 0x06    | TOTAL_LEN | beats |
| 0x07    | BURST_LEN | beats per burst, at most 128 |
| 0x20-3F | P2P table | entry (addr − 0x20) ← {y = wdata[5:3], x = wdata[2:0]} |
| 0x40-4F | TLB       | page (addr − 0x40) ← wdata[11:0] |

The interrupt is a level. It is set when a run finishes and cleared by the
next start.

## The SoC (`esp_soc`)

`esp_soc` is a 5-column × 4-row mesh. It has two planes: request and
response.

- **Memory tile** at (0,0): its request-plane output and response-plane input
  are ports of the top level.
- **CPU tile** at (1,0) and **I/O tile** at (1,1): their router ports are
  left idle.
- **Accelerator tiles**: the other 17 tiles, in row-major order. A shared
  configuration bus selects a tile with `cfg_acc`, and each tile has its own
  interrupt line.

The paper's floor plan shows 5×4 tiles. Its text calls the system "3x4" and
also lists 1 + 1 + 1 + 17 tiles, which is 20. This design follows the
figure, which matches the count.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

The end-to-end test `tb_esp_soc` runs the top level at its default size. It
uses `tb/mem_model.sv` as the memory tile, with a latency of 20 cycles. The
test:

1. Has accelerator 0 read 8 KB from memory and multicast it to 16 consumers.
   Each consumer does a P2P read and writes what it got back to its own
   memory page.
2. Runs the same exchange through memory: the producer writes, then every
   consumer reads.
3. Compares every beat of every consumer's page.

It counts each mechanism: DMA reads and writes, unicast and multicast
packets, router forks, and backpressure stalls. It fails if any of them never
happens. In the run recorded here, multicast took 4737 cycles and the
shared-memory path took 9673 cycles, a speedup of about 2.04×.

To run a testbench with plain Verilator (package first):

    verilator --binary --timing --assert -Irtl -Itb rtl/noc_pkg.sv \
        $(ls rtl/*.sv | grep -v noc_pkg) tb/mem_model.sv tb/tb_esp_soc.sv \
        --top-module tb_esp_soc -Mdir obj
    ./obj/Vtb_esp_soc

The full SoC builds in about one and a half minutes and simulates in seconds.
Block testbenches build the same way with their own top module;
`tb_mcast_router` and `tb_dma_ctrl` override `DATA_W` to 64 to keep the
flits readable.

## Where this design departs from the paper, and limitations

- **Concurrent multicasts can deadlock.** Two multicast trees that need each
  other's links can deadlock the wormhole mesh. The paper does not describe
  a prevention mechanism. The tests therefore multicast from one producer at
  a time; unicast traffic from all tiles at once is tested.
- **No write acknowledgement.** A DMA write to memory has no
  acknowledgement. A tile's `done` can come before its last write reaches
  memory; the tests wait for the writes to drain.
- **One transfer per direction.** Each socket runs one read and one write at
  a time. The IDMA unit has 4 tags but does not overlap transfers.
- **Data width.** The accelerator data width equals the NoC width (256
  bits). The paper's interface figure prints 64-bit data.
- **Word size.** The word-size field is carried but not used to pack
  narrower words: every beat is a full `DATA_W`.
- **Not built:**
  - the processor, memory and I/O tiles;
  - the cache-coherence planes and their private caches;
  - accelerator synchronisation through the cache hierarchy;
  - the programmable accelerator cores the paper targets;
  - the interrupt plane. Interrupts are plain wires here.
- **Measurements.** Router area and the paper's larger sweeps (up to 1 MB and
  16 consumers) were not measured. The parameters allow all of those sizes at
  the defaults.
