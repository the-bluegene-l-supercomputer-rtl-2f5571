# A node of a BlueGene/L-style machine in SystemVerilog

BlueGene/L builds a very large parallel computer, 65,536 nodes, out of a single
kind of chip. Each chip is a complete node: two processors, their caches, a
4 MB cache of embedded DRAM, a controller for external DDR memory, and the
logic of two networks. One network is a 3-d torus that links every node to
six neighbours and carries point-to-point messages. The other is a tree that
combines one value from every node (a sum, a maximum, a logical operation)
and returns the result to all nodes, or broadcasts a value from one node to
all. Large machines are cut into independent smaller machines by *re-drive*
chips at the edges of each mid-plane of 8x8x8 nodes. They either pass the
links on to the next cabinet or close the mid-plane's links on themselves.

This RTL describes the parts of such a node that are ordinary digital logic:
- the torus router with its link protocol;
- the tree router;
- the memory path below the processors (L2 prefetch buffers, shared L3,
  ECC, DDR controller);
- the lock box and shared SRAM that the two processors use to talk to each
  other;
- the re-drive chip.

The top level, `bgl_xring`, is one x-line of a mid-plane: eight nodes
chained along x, with the two re-drive chips where the line leaves the
mid-plane. The processor cores, their floating-point units and L1 caches,
the on-chip bus, Ethernet, JTAG, the serial-link circuits and the DRAM chips
are not part of this RTL. Where they would connect, their signals are ports.

## Contents

| file | what it is |
|---|---|
| `rtl/bgl_pkg.sv` | shared types: link bundles, tree words, packet header helpers, sizes |
| `rtl/crc16.sv` | one byte step of the link CRC |
| `rtl/pkt_fifo.sv` | byte FIFO whose writes are tentative until committed or dropped |
| `rtl/torus_route.sv` | minimal-path route selection, adaptive and deterministic |
| `rtl/torus_link_tx.sv`, `rtl/torus_link_rx.sv` | the two ends of a torus link: CRC, ack/nak, retransmission |
| `rtl/torus_router.sv` | the node's torus logic (6 links, 2 VCs, 7 injection / 12 reception FIFOs, crossbar) |
| `rtl/tree_alu.sv`, `rtl/tree_router.sv` | the node's global tree logic |
| `rtl/l2_prefetch.sv` | a processor's 2 KB fully associative prefetch buffer |
| `rtl/l3_bank.sv`, `rtl/l3_cache.sv` | the 4 MB, 8-way, two-bank shared L3 |
| `rtl/secded_enc.sv`, `rtl/secded_dec.sv` | (72,64) single-error-correct, double-error-detect code |
| `rtl/ddr_ctrl.sv` | external memory controller with ECC, 144-bit data beats |
| `rtl/lock_box.sv`, `rtl/mp_sram.sv` | locks and shared SRAM for the two processors |
| `rtl/redrive.sv` | re-drive chip: route select for partitioning |
| `rtl/bgl_node.sv` | the node: all of the above wired together |
| `rtl/bgl_xring.sv` | top: 8 nodes along x plus two re-drive chips |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/ddr_model.sv` | behavioural model of the external DRAM |

## The torus network

The torus network is the largest and most involved part of the design, and
most of this section is about it.

### Packets

A packet is 32 to 256 bytes long, in steps of 32 bytes (one *chunk*). The
first four bytes are its header:

| byte | bits | meaning |
|---|---|---|
| 0 | 7:5 | length in chunks minus one |
| 0 | 4 | adaptive: the packet may take any shortest path |
| 0 | 3 | deposit: leave a copy at every node passed |
| 0 | 2 | virtual channel currently used (set by the routers) |
| 1, 2, 3 | | destination x, y, z |

The processor writes a complete packet, header included, into one of seven
injection FIFOs. The packet is delivered, header included, into one of
twelve reception FIFOs of the destination node. These FIFOs are ports of the
node (`inj_*`, `rec_*`). In the real chip they sit behind the processor bus.

### Links

Each link carries one byte per clock (`link_fwd_t`: valid + byte). Each link
also has a reverse sideband (`link_bwd_t`) that carries three things:
- `ack` and `nak` for the packet just received;
- a token pulse per virtual channel.

The sender (`torus_link_tx`) computes a CRC-16 (polynomial 0x1021, start
value 0xFFFF, high bit first) over the packet. It appends the CRC as two
extra bytes and keeps a copy of the packet. The receiver (`torus_link_rx`)
writes the bytes into the input buffer of the virtual channel named in the
header. The write is tentative. When the CRC is good, the receiver commits
the packet and answers `ack`. When the CRC is bad, it rolls the buffer's
write pointer back, so the packet disappears, and answers `nak`. On a nak
the sender replays its copy. So a bit error on a link costs one
retransmission and is never seen beyond the link.

Only one packet is outstanding per link (stop-and-wait). That is the
simplest protocol that does the job; the original only says that errors are
handled in hardware, not how.

### Buffers and tokens

Each of the six inputs has two virtual channels (VC0 and VC1), each with a
1 KB buffer (`pkt_fifo`). The sender side of each output counts *tokens*,
the free 32-byte chunks in the neighbour's buffer for each VC. A token
comes back on the sideband for every 32 bytes that leave that buffer.

A packet is granted an output only when the tokens cover the whole packet.
Once a packet starts, it can never block halfway across a link. This is
the virtual cut-through rule. The clocks in which a complete packet waits
only for tokens are counted (`n_tok_stall`).

The crossbar has 19 inputs (6 links x 2 VCs + 7 injection FIFOs) and 6
outputs, and is one byte wide. Each output picks among its requesters
round robin.

### Routing

`torus_route` looks at the header, the node's own coordinates and the torus
size. Coordinates and size are configuration inputs, so one design serves
any partition. For each dimension it finds the directions that shorten the
distance. At exactly half a ring, both directions are equally short and +
is taken.

- An *adaptive* packet travels on VC0. It may take any shortest direction,
  and picks the one whose neighbour has the most free VC0 tokens. Traffic
  therefore flows around congested links.
- A *deterministic* packet travels on VC1, the escape channel. It finishes
  x first, then y, then z.
- An adaptive packet that cannot move on VC0 may drop to VC1 and continue
  deterministically. Adaptive packets therefore cannot deadlock each other,
  because VC1 always drains.

VC1 alone could still deadlock around a ring, because every buffer in the
ring can fill. This is prevented by a *bubble* rule: a packet that enters a
new ring on VC1 (injected, or turning from another dimension) needs tokens
for its own length plus one maximum packet (8 chunks). A packet already
travelling along the ring needs only its own length. So every ring always
keeps at least one packet's worth of room.

A packet that arrives at its destination goes to the reception FIFO of the
input and VC it arrived on. A packet injected with the node's own address
is discarded and counted (`n_discard`).

### Deposit multicast

A deterministic packet with the deposit bit set leaves a copy in a reception
FIFO of every node it passes through, and of course of its destination. A
processor can thus reach all nodes along a line with one packet.

### Store-and-forward inside a node

An input buffer releases a packet to the crossbar only after all of it has
arrived and its CRC has been found good. This is what allows a bad packet
to be removed from the buffer it was written to. It means each hop costs
the packet's length in clocks, where the original design cuts through as
soon as the header has arrived. The routing and arbitration also take about
two clocks, instead of the deep pipeline of a real switch.

## The tree network

Every node has three tree ports. Configuration inputs say which port leads
to the parent (`parent`, 3 = this node is the root) and which ports have
children (`child_en`).

- **Reduction.** A node waits until its own word (`inj`) and a word with
  the same operation from every child are present. It then combines them in
  one clock (`tree_alu`: signed maximum, wrapping sum, AND, OR, XOR) and
  sends the result to its parent.
- **Broadcast.** A broadcast word is passed up unchanged.
- **At the root.** A word arriving at the root turns around. On the way
  down each node copies it to every child and to its own reception register
  (`rec`). Every node therefore gets the combined result, or the broadcast
  value, exactly once.

Words are 32 bits. Each port is a register with valid and ready. A register
is reloaded only once it is empty. This halves the throughput to one word
per two clocks per link, but no ready signal depends combinationally on
another node. That matters in a tree of 65,536 nodes.

In `bgl_xring` the eight nodes form a binary tree. The port 0 of node i
(i > 0) connects to port 1 + (i-1) mod 2 of node (i-1)/2. Node 0's port 0
leaves the line (`tree_up_*`).

## Memory path

Each processor has an `l2_prefetch` buffer: 2 KB, fully associative,
32-byte lines, round-robin replacement.
- A read that hits answers after 6 clocks.
- A read that misses fetches its line from L3.
- Every read also starts a fetch of the next sequential line, so streaming
  reads become hits.
- Writes go through to L3 and update a matching line in the buffer.

`l3_cache` is shared by the two processors. It is 4 MB, 8-way set
associative, write-back, with 32-byte lines, organised as two banks
(`l3_bank`) selected by address bit 5. The two processors can work in
different banks at the same time. When both want the same bank, they take
turns.
- The data arrays hold (72,64) SEC-DED codewords. A single-bit error is
  corrected on the way out and counted; a double-bit error is counted as
  uncorrectable.
- After reset each bank clears its directory, one set per clock. `init_done`
  tells when that is over (8192 clocks at full size).
- The array access time is the parameter `HIT_LAT` (20). It is chosen so
  that a processor read that misses L2 and hits L3 takes about 25 clocks
  from request to data.

`ddr_ctrl` writes and reads whole 32-byte lines as two 144-bit beats. Each
beat holds two 72-bit codewords, and each codeword is checked and corrected
on a read. The interface to the DRAM is a command (valid, write, address)
plus the data beats. The DRAM's command protocol (activate, precharge,
refresh, timing) is not built. With a DRAM that answers 44 clocks after the
command, an L3 miss reaches the processor after about 75 clocks.

## Processor-to-processor communication

- **`lock_box`** has 64 locks. An `acq` on a free lock takes it, and
  `got` says so one clock later. When both processors ask for the same lock
  in the same clock, processor 0 wins. Only the owner can release a lock; a
  release by anyone else is flagged (`bad_release`).
- **`mp_sram`** is 1024 x 128 bits with two ports. Reads take one clock.
  When both ports write the same address in the same clock, port 0 wins.

## Partitioning: the re-drive chip and the x-line

`redrive` has one register per path, and `sel_include` selects the route:
- **include (1):** the signal from the -x cable enters the mid-plane's first
  node, and the signal leaving its last node goes out on the +x cable. The
  mid-plane is part of a larger torus.
- **skip (0):** the cable signal passes straight through, and the
  mid-plane's end is fed back to its start. Its nodes form a torus of their
  own, electrically separate from the cables.

`bgl_xring` uses two re-drives, one per direction of travel. Each carries a
whole link bundle, with data and sideband. The torus size and coordinates
given to the nodes must match the selected partition:
- a ring of 8 for skip;
- the larger ring for include.

## Configuration and timing summary

| item | value |
|---|---|
| link width | 1 byte per clock plus sideband |
| packet | 32..256 bytes, 4-byte header, 2 CRC bytes on the link |
| buffers | 1 KB per VC, per injection FIFO and per reception FIFO |
| tree word | 32 bits, one per two clocks per link |
| tree round trip | about one clock per level each way: 6 clocks from injection to the last result in the 8-node tree |
| L2 hit | 6 clocks |
| L2 miss, L3 hit | 24 clocks (measured) |
| L3 miss | 74 clocks with a 44-clock DRAM (measured) |
| L3 init after reset | 8192 clocks |
| torus size, coordinates, tree roles, partition | configuration inputs |

## How far this matches the original

Followed:
- 6 torus links with 2 virtual channels each;
- 7 injection and 12 reception FIFOs, and the 19x6 byte-wide crossbar;
- token flow control and whole-packet grants;
- minimal adaptive and deterministic routing;
- CRC on every link, with bad packets deleted and resent;
- multicast to the nodes along a route;
- tree reductions (integer max and sum, AND, OR, XOR) and broadcast on a
  tree with three ports per node;
- 2 KB prefetching L2 buffers;
- 4 MB 8-way two-bank L3 with ECC, and ECC on the 144-bit DDR interface;
- lock box and multiport SRAM;
- re-drive partitioning of a mid-plane of 8 nodes per line;
- the L2, L3 and memory latencies.

Choices made here because the original does not say:
- the header layout;
- the CRC polynomial;
- stop-and-wait link retransmission and the token sideband;
- buffer sizes;
- the rule that picks among adaptive directions;
- the escape channel with its bubble rule;
- deposit as the form of multicast;
- round-robin arbitration;
- 32-bit tree words;
- the prefetch and write policies;
- the line size;
- the SEC-DED code;
- lock and SRAM sizes and priorities;
- the binary tree wiring of the x-line.

Departures and omissions:
- **Torus switching.** Each hop is store-and-forward inside the node, not
  cut-through, and the switch is not deeply pipelined.
- **Link protocol.** Stop-and-wait per link, one packet in flight, which
  limits a long link's throughput.
  Tokens travel on a sideband, not in CRC-protected packets.
- **Bandwidth.** The L3 banks, the L2 buffers and the DDR controller serve
  one request at a time. Their bandwidth is therefore well below the
  original's:
  - about 3 bytes per clock from L3, against 32;
  - about 0.6 bytes per clock from DRAM.
  The latencies match.
- **DDR protocol.** The DRAM command protocol is not built.
- **Not modelled at all:**
  - the processor cores, FPUs and L1 caches;
  - the processor bus and address map: FIFOs, locks, SRAM and memory are
    separate ports;
  - Ethernet, JTAG and boot;
  - the serial link circuits (the RTL moves a byte per clock where the link
    moves 1.4 Gbit/s);
  - the DRAM chips (a behavioural model, `tb/ddr_model.sv`, stands in for
    them in simulation).
- **Size of the top level.** Only one x-line is instantiated. The full
  machine (32x32x64) and its partitions (32x32x32, 16x16x16, 8x8x8) are
  supported by the node logic through the size and coordinate inputs (8 bits
  per dimension), but not built as a whole.

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and stops, and it has a watchdog. With
Verilator 5:

    verilator --binary --timing -y rtl -y tb rtl/bgl_pkg.sv tb/tb_bgl_xring.sv --top-module tb_bgl_xring
    obj_dir/Vtb_bgl_xring

Replace `tb_bgl_xring` with any other testbench name.

| testbench | what it does |
|---|---|
| `tb_crc16` | CRC step against a bit-serial reference and the standard check value |
| `tb_pkt_fifo` | random packets committed or dropped; order, counts, peek |
| `tb_torus_route` | random torus sizes and positions against an independent model: productive directions, dimension order, token and bubble rules |
| `tb_torus_link` | sender and receiver over a channel that corrupts bytes; every packet arrives once and intact |
| `tb_torus_router` | nine routers as a 3x3 torus with CRC errors injected; every packet and deposit copy checked |
| `tb_tree_alu`, `tb_tree_router` | operations against a model; reductions and broadcasts on a 7-node tree |
| `tb_lock_box`, `tb_mp_sram` | random traffic against models |
| `tb_secded` | every single-bit error corrected, double-bit errors detected |
| `tb_l2_prefetch`, `tb_l3_cache`, `tb_ddr_ctrl` | data against models, latencies, bank concurrency, ECC |
| `tb_bgl_node` | one node: the three memory latencies, ECC, lock and SRAM, one packet out and one in, a tree reduction |
| `tb_bgl_xring` | the whole top at full size |

`tb_bgl_xring` runs the top at its full default size: eight nodes, each with
a 4 MB L3. It takes under a minute. It runs in two phases.

Phase A (ring of 8, cables skipped):
- 240 random packets of all lengths; adaptive, deterministic, deposit, and
  addressed to self;
- twelve rounds of tree reductions and broadcasts;
- on every node, memory traffic with latency checks and DDR bit errors;
- on every node, the lock and SRAM hand-off.

Phase B (line included through cables that the testbench loops back):
- the testbench corrupts bytes on the cable, so links must detect and
  resend;
- 160 more packets.

It counts every mechanism and fails if one never occurred:
- adaptive and escape hops, deposits, discards;
- CRC errors and retransmissions, token stalls;
- tree reductions and broadcasts;
- L2 hits and prefetches, L3 hits and misses;
- corrected and uncorrectable ECC errors;
- cable traffic in the included mode only.
