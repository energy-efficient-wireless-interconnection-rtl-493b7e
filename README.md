# Wireless interconnection fabric for a multichip system with in-package memory stacks

This repository holds synthesizable SystemVerilog for the interconnection
fabric of a multichip system in one package. Four 16-core processing chips
and four 3D DRAM stacks talk to each other over a single shared 60 GHz
wireless channel, not over an interposer. This is the paper's main
configuration, "4C4M". Each chip has a 4x4 mesh network-on-chip. One switch
of each mesh carries a wireless interface (WI). The logic die under each
memory stack carries a switch with a WI. That makes eight WIs. They share
the channel through a distributed, contention-free control-packet MAC.

## Blocks

| File | What it is |
|------|------------|
| `rtl/mcw_pkg.sv` | Constants (system size, VCs, buffer depth, flit width, slot length), flit/link/credit types, node numbering, shortest-path routing functions |
| `rtl/vc_fifo.sv` | One virtual-channel buffer: 16 flits, fall-through output |
| `rtl/route_lut.sv` | Forwarding table of one switch: destination to output port (and next WI for the wireless port), built at elaboration |
| `rtl/noc_switch.sv` | Wormhole switch: 6 ports (local, N, E, S, W, wireless), 8 VCs x 16 flits per input, credit flow control, three stages (route computation, VC allocation, switch allocation/traversal) |
| `rtl/wireless_interface.sv` | WI: transmit and receive VC buffers, the control-packet MAC, partial-packet transfer, receive-VC reservation by packet ID, receiver sleep control |
| `rtl/ook_transceiver.sv` | Behavioural model of the OOK transceiver: fixed latency, one 32-bit word per 5 cycles (16 Gb/s at 2.5 GHz), receiver output gated while asleep |
| `rtl/mesh_chip.sv` | One processing chip: 4x4 mesh of switches, WI and transceiver at tile (1,1) |
| `rtl/memory_node.sv` | Logic die of one memory stack: switch, WI, transceiver; the DRAM side is the local port |
| `rtl/multichip_top.sv` | The 4C4M system: 4 chips, 4 stacks, the shared channel |

Not built: the processing cores, the DRAM layers, the antenna and the sleep
transistors. The paper takes these from elsewhere, or they are analog
circuits. The cores and DRAM controllers attach at the top-level `core_*`
and `mem_*` link ports.

## How it works

**Flits and links.** A flit is 32 bits plus a 2-bit type (head, body, tail,
control). A link carries `{valid, vc, flit}`, and a credit returns `{valid, vc}`.
A head flit carries the destination node in bits 31:25 and the source node in
bits 24:18. Nodes 0-63 are cores (chip*16 + y*4 + x); nodes 64-67 are the
stacks.

**Routing.** Every switch has a table with a shortest path to every node. The
paths run over the mesh links and one wireless edge between every pair of
WIs. Ties between equal-length next hops are broken in the order E, W, N, S,
then wireless. Inside a chip, routes are therefore X-first. Every route
crosses the air at most once, so the routing cannot deadlock.

**Wireless MAC.** WIs take turns in WI-number order. Every WI follows the
same schedule from what it hears on the channel. A turn begins with a
header word: source WI, number of tuples, number of idle receive VCs, and a
bitmap of the sources whose data this WI has fully drained. The header is
followed by one tuple word per packet part to be sent: destination WI,
packet ID (source WI and VC), and flit count. The data words of those parts
come next. An empty turn is just the header. The data are partial packets:
whatever flits of the front packet of a VC are buffered at the start of the
turn, up to 16. A receiving WI looks the packet ID up among its VCs. If it is
absent, it reserves the lowest free VC. The reservation is released once the
tail has gone to the switch. A sender only addresses a WI whose last header
showed its earlier data drained. It starts a new packet there only if that
WI advertised enough idle VCs. So receive buffers cannot overflow. A WI's
receiver sleeps in every slot that is not a header or tuple and is not
addressed to it, and in its own turn.

**Timing.** The clock is 2.5 GHz. A channel slot is 5 cycles (32 bits at
16 Gb/s). A switch passes a head flit in 4 cycles and a body flit in 2. An
idle round of the channel takes 8 slots (40 cycles).

## Choices this design makes where the paper is silent

- The layout of the control-packet header and tuple words.
- The over-the-air flow control (drained bitmap and idle-VC count).
- The position of the WI tile.
- The tie-break order in routing.
- Using the shortest-path rule for every pair, not a single routing tree.

The paper asks for both, and they cannot hold together in this graph.

Each file's header comment says what follows the paper and what is this
design's own.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

- `tb_vc_fifo`: random push/pop against a reference queue.
- `tb_route_lut`: follows all 68x68 routes hop by hop. It checks real links,
  arrival, shortest length against its own breadth-first search, and at most
  one wireless hop.
- `tb_noc_switch`: head latency (4 cycles) and body latency (2 cycles), and
  random traffic on all ports. It checks routing, flit order and wormhole
  integrity.
- `tb_ook_transceiver`: latency, sleep gating and one word per slot.
- `tb_wireless_interface`: all eight WIs on one channel. It checks:
  - delivery, and the contention-free channel;
  - WI order of the headers;
  - 5-cycle data slots and the 40-cycle idle round;
  - partial packets, VC reservation, and sleep of an uninvolved WI.
- `tb_mesh_chip` and `tb_memory_node`: one chip, or one stack, with the seven
  other WIs. Traffic runs inside the chip and over the air in both
  directions.
- `tb_multichip_top`: the full 4C4M system with default parameters. All 68
  nodes inject packets, 20% of core traffic going to memory. Every packet is
  checked at its destination. Each mechanism must occur at least once:
  - mesh, wireless and memory traffic;
  - headers, partial packets and VC reservation;
  - sleep and credit stalls.
