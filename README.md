# OpenFlow switch fabric with RAM-based CAM/TCAM flow tables

## Main idea

A complete OpenFlow switch, data plane and southbound agent, built as one
hardware pipeline, with throughput scaled by the width of the datapath
rather than the clock. Every stage handles one datapath beat or one packet
decision per cycle. The parser walks its whole header graph in a single
cycle. The flow tables are content-addressable memories built from ordinary
dual-port RAMs, so a lookup takes a fixed few cycles and does not depend on
how many entries are installed. So the forwarding rate is the datapath width
times the clock: 512 bits at 160 MHz is 81.92 Gbps, enough for eight 10G
ports. The same RTL widens to 1024, 2048 or 4096 bits for more or faster
ports.

The controller is reached over an 8-byte-wide channel. The agent on the
switch side is hardware too. It decodes OpenFlow 1.3 messages, installs
flow entries, answers statistics requests, and turns table misses into
packet-ins and the controller's packet-outs into forwarding.

## Architecture

```
 MAC rx x N ─► input_buffer x N ─► input_arbiter ─► pkt_fifo (packet buffer) ─────────┐
                                       │ header copy                                  ▼
                                       └─► parser ─► flow_match_unit ─► result queue ─► action_execution ─► pkt_fifo x N ─► MAC tx x N
                                                        ▲   (flow_table x N_TABLES)       │   ▲ (pkt_modifier)
                                                        │ flow-mod / statistics           │   │ packet-in / packet-out
 controller channel (64-bit) ◄──────────────► of_agent ─┴─────────────────────────────────┴───┘
                                             (of_out_arbiter)
```

| Module | Role |
|---|---|
| `sdn_switch` | Top level. Wires the blocks, holds the time base and the event counters. |
| `input_buffer` | Per-port store-and-forward queue. Whole-packet drop when full. Receive counters. |
| `input_arbiter` | Picks the next packet. Ports at least half full go first, round-robin within a class. Moves the packet into the packet buffer and sends a header copy to the parser. Credit flow control. |
| `pkt_fifo` | Beat FIFO. Used as the packet buffer, the output queues and the result queue. |
| `parser` | One-cycle header extraction: Ethernet, 2×VLAN, 4×MPLS, IPv4/IPv6/ARP, ICMP/UDP/TCP/ICMPv6. Builds a 464-bit match tuple and marks malicious packets. |
| `ram_cam` | CAM or TCAM made of chunk RAMs, one bit per entry. A lookup ANDs the rows; a write walks the chunk addresses. |
| `flow_table` | Module controller, `ram_cam`, priority encoder, priority and instruction memories, per-flow and per-table counters. |
| `flow_match_unit` | Table pipeline linked by goto-table. Merges actions and applies the table-miss rule. Drops malicious packets, and controller-bound packets while the buffers are full. Its pipeline handler serves flow-mods and statistics. |
| `action_execution` | Action set decoder. Internal buffers for packets waiting on the controller, packet-in requests, packet-out replay, drop, modification, and de-mux to the output queues. |
| `pkt_modifier` | Set Ethernet destination, set VLAN id, decrement TTL with a checksum update, and push/pop of VLAN and MPLS. A byte gearbox keeps one beat per cycle. |
| `of_agent` | OpenFlow 1.3 agent: header decoder and handlers for hello/echo/error, features/config, flow-mod/table-mod, packet-out, statistics and packet-in. |
| `of_out_arbiter` | Fixed priority over the agent's reply buffers: packet-in, then statistics, then switch information, then channel. |
| `sdn_pkg` | Tuple, metadata, action set, instruction and message types. |

## Timing (default instance)

- Clock 160 MHz. `DATA_W = 512`, 8 ports, 2 flow tables of 1024 entries: table 0 a TCAM, table 1 a CAM.
- Input arbiter: one beat per cycle, with one idle cycle between packets. A 1536-byte packet takes 25 cycles, which is 78.6 Gbps with all inputs backlogged (measured).
- Parser: result one cycle after the header copy. One packet per cycle.
- `ram_cam` lookup: 2 cycles. `flow_table` lookup: 4 cycles. Both take one lookup per cycle.
- Flow match unit: result `N_TABLES*5+1` = 11 cycles after the tuple. One packet per cycle.
- Flow entry add: `2^CHUNK_W + 3` cycles. That is 259 cycles for a CAM (8-bit chunks) and 67 for a TCAM (6-bit chunks). Lookups continue meanwhile.
- Packet modifier: one beat per cycle, one idle cycle between packets.
- Flow statistics scan: 3 cycles per table slot.

## What follows the paper and what is this design's choice

**From the paper:**
- The block structure and data flow: input buffers, arbiter, packet buffer, a header copy to the parser, the flow match unit, action execution, output queues and the agent.
- Parser: a one-cycle parser graph with a shifter driven by the IPv4 IHL field, VLAN and MPLS extraction, and malicious-packet marking.
- Flow tables:
  - A TCAM for wildcard matching and a CAM for exact matching, both built from dual-port RAMs.
  - Writes that take several cycles.
  - A priority encoder feeding the instruction memory.
  - Per-flow and per-table counters.
  - Forward-only goto-table.
- Action execution:
  - Internal buffers for controller-bound packets.
  - Drop of such packets when the buffers are full, signalled to the flow match unit.
  - Packet-in and packet-out.
  - The modification actions: push/pop VLAN/MPLS, TTL and set-field.
- Agent: an 8-byte channel and in-order processing, with the four reply classes in the paper's priority order.
- Sizes and rates: 160 MHz, 1K-entry tables, 512-bit datapath with 8 ports.

**This design's choices (the paper does not give them):**
- Data layouts: the tuple layout, the action-set encoding and the compact FLOW_MOD body. The FLOW_MOD body is command, table, priority, a 512-bit key, a 512-bit mask and a 128-bit instruction, instead of OXM TLVs.
- Which packets count as malicious. Two flow tables.
- The arbiter's congestion rule. Credit flow control between the arbiter and action execution.
- Buffer depths: 16 internal buffers of 1536 bytes, input buffers of 64 beats, a packet buffer of 128 beats, output queues of 64 beats.
- Chunk widths and all latencies.
- The packet-in carries no packet data.

## Not built

- The 10G/100G Ethernet MACs and PHY card.
- The output buffers on the MAC side. The output queues stand in for them.
- The PCIe/RIFFA link to the controller. It is replaced by a plain 64-bit stream.
- The controller software.

## Scaling (Table I)

| Instance | Capacity (width × 160 MHz) | Needed | Default parameters |
|---|---|---|---|
| 512-bit, 8 × 10G | 81.92 Gbps | 80 Gbps | yes, simulated end to end |
| 1024-bit, 16 × 10G | 163.84 Gbps | 160 Gbps | set `DATA_W=1024, N_PORTS=16` |
| 2048-bit, 32 × 10G | 327.68 Gbps | 320 Gbps | set `DATA_W=2048, N_PORTS=32` |
| 4096-bit, 4 × 100G | 655.36 Gbps | 400 Gbps | set `DATA_W=4096, N_PORTS=4` |

## Verification

Each block has a self-checking testbench, `tb/tb_<module>.sv`. Each one:
- drives random traffic against a reference model;
- checks latencies and rates where the design states them;
- counts coverage of the block's mechanisms;
- ends with a `TB_RESULT` line.

For each block, a deliberately broken copy of the module was also run against its testbench to confirm that the testbench catches the fault.

`tb/tb_sdn_switch.sv` tests the whole switch at its default, full size. It plays the controller over the channel and the MACs on the ports. It installs TCAM and CAM entries over OpenFlow messages. It then runs:
- mixed traffic;
- an output stall;
- a controller that withholds packet-outs until the buffers fill;
- a full-rate burst that overflows the input buffers;
- a strict flow delete.

It checks:
- every delivered packet byte for byte;
- that nothing which should be dropped is delivered;
- the port, table and flow statistics replies;
- the saturated forwarding rate.

It counts each mechanism and fails if any of them never happened:
- drops: input overflow, table miss, malicious packets, buffers full, and the packets of the deleted flow;
- back-pressure: output stall, packet-buffer back-pressure and channel back-pressure;
- flow tables: congested grant, goto with a CAM hit, and table lookups;
- controller: miss to controller, action to controller, packet-out forward and drop, and the statistics replies;
- modification: TTL decrement and VLAN push.
