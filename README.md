# A network and remote-memory fabric for serverless swarm back ends

Swarms of drones and robotic cars increasingly push their heavy work
(recognition, mapping, route planning) to serverless functions in a cloud
cluster. That work is made of many short functions that hand data to each
other and talk to each other and to the devices with small RPCs. On a
conventional server two software costs dominate: the kernel network stack
that every small RPC crosses, and the round trip through a remote store
whenever one function reads the output of another.

This design moves both costs into an FPGA that sits beside each server CPU on
its coherent memory link. The FPGA is split, permanently, into two regions
that share one Ethernet port:

* a **NIC region** that runs the whole RPC stack in hardware. Host threads
  hand 64-byte RPCs to the fabric as cache lines and get the received RPCs
  back the same way;
* a **remote-memory region** that lets a function on one server read or
  write, line by line, an object that a function on another server left in
  that server's memory. Objects are named by an id, and the server that holds
  the object translates the id to a physical address in its fabric.

Both regions can be tuned while running through a small register file: how
many host threads are active, how deep the queues are, how many lines make a
host transfer, and how received requests are spread over threads.

The RTL is written in SystemVerilog, in `rtl/`. It is one clock domain with a
synchronous, active-low reset (`rst_n`).

## Block map

```
              host CPU (coherent link shell: not part of this RTL)
    csr_*        host_tx_*/host_rx_*       rdma_req/cpl_*    mem_*
      |                 |                        |             |
 soft_regfile      cpu_nic_if                 rdma_interface --+
      |           |          ^                 |   ^   (object table)
  cfg (all)   flow TX q   flow RX q            |   |
              (sync_fifo x NUM_FLOWS each)     |   |
                  |          ^                 |   |
                  rpc_unit --+-- connection_manager (3 lookup ports)
                  |          ^                 |   |
            net TX q      net RX q             |   |
                  |          ^                 |   |
                  transport -+                 |   |
                     |   ^                     |   |
                     net_mux  <----------------+---+
                       |  ^
               avst_tx_*  avst_rx_*   (Ethernet PHY / QSFP: not part of this RTL)

 packet_monitor: per-connection frame counters and a drop counter, fed by
                 transport, rdma_interface, rpc_unit and net_mux events
```

| Module | Role |
|---|---|
| `hm_pkg` | Shared types: RPC descriptor, frame header, remote-memory opcodes, soft configuration, payload checksum |
| `hivemind_fabric_top` | Wires the blocks together; decodes the host register port |
| `soft_regfile` | Run-time configuration registers |
| `sync_fifo` | The RPC queues: a RAM FIFO whose "full" threshold is set at run time |
| `cpu_nic_if` | Host side of the NIC region: per-flow transmit queues in, batched receive out |
| `rpc_unit` | Transmit arbitration over flows; receive checks and load balancing |
| `connection_manager` | Table of open connections |
| `transport` | UDP-style framing, checksum and receive filtering for RPC frames |
| `frame_ser`, `frame_deser` | 704-bit frame to and from eleven 64-bit Avalon-ST beats |
| `rdma_interface` | Remote-memory requester and responder, with the object table |
| `net_mux` | Shares the PHY stream between the two regions |
| `packet_monitor` | Traffic and drop counters |

## Flows, queues and batching (NIC region)

This is the part with the most moving pieces.

**Flows.** Each host RPC thread is a *flow*. There are `NUM_FLOWS` flows (4
by default). At run time only the first `active_flows` of them are used. Each
flow has a transmit queue and a receive queue, each a `sync_fifo` of
`QDEPTH` entries (64 by default). An entry is a 64-byte line plus a 37-bit
descriptor `{kind, conn, flow, fn_id, rpc_id}`. Two run-time registers cap how
many entries a queue may hold: `tx_qsize` for the transmit queues and
`rx_qsize` for the receive queues. A queue reports full when it holds that
many entries, whatever its physical depth.

**Host to network.** The host offers an RPC with its flow number
(`host_tx_*`). `cpu_nic_if` pushes it into that flow's transmit queue in the
same cycle. It holds the host off while the queue is full, the flow is
inactive, or the fabric is disabled. `rpc_unit` picks the next non-empty
active flow in round-robin order. It then looks up the RPC's connection:
* if the connection is open, the RPC goes to the network transmit queue with
  the peer's IP address and ports attached;
* if it is closed, the RPC is removed and counted as a drop.

**Network to host.** `rpc_unit` takes the RPC at the head of the network
receive queue. The RPC is dropped if its connection is not open, or if the
frame's destination port is not the connection's local port. Otherwise a
receive flow is chosen:

* a **response** goes back to the flow that issued the request. That flow's
  number travels in the descriptor, so the thread blocked on the call gets the
  answer;
* a **request** is spread according to the `lb` register:
  * static (`lb`=0): flow `conn mod active_flows`, so every connection
    always lands on the same thread;
  * round robin (`lb`=1): the next active flow in turn.

If the chosen receive queue is full, the RPC waits at the head of the
network queue. This back-pressure reaches the transport and, through the
stream handshake, the link.

**Batching.** The host link moves data in cache lines, and handing over
several lines in one transfer is cheaper than one line at a time. The
`batch` register (1..`MAX_BATCH`, 8 by default) sets how many lines make one
transfer. A receive queue becomes eligible when either:
* it holds `batch` RPCs (a *full batch*), or
* its oldest RPC has waited `flush_timeout` cycles (a *flushed batch*), so a
  lone RPC is never stranded.

Eligible flows are served round robin. A batch is `min(queued, batch)` lines
sent on consecutive cycles (whenever `host_rx_ready` is high), with
`host_rx_flow` naming the flow. `host_rx_last` marks the final line of each
batch.

Each direction of `rpc_unit` moves at most one RPC per cycle. It makes its
decision combinationally from the queue heads, and pops and pushes at the
same edge. There is no pipeline, and an RPC is handled to completion in the
cycle it is taken.

## Frames on the wire

Both regions use one frame layout: a 192-bit header and the 512-bit payload,
704 bits in all. The frame is sent most-significant word first as eleven
64-bit Avalon-ST beats, with start- and end-of-packet on the first and last
beat. Consecutive frames follow each other without idle beats.

```
word 0: proto[63:56] conn[55:48] csum[47:32] dst_ip[31:0]
word 1: src_ip[63:32] dst_port[31:16] src_port[15:0]
word 2: application word
          RPC (proto 17):  the RPC descriptor, zero-extended
          remote memory (proto 254): op[63:61] rsvd tag[47:32] obj[31:24] offset[23:0]
words 3..10: payload line
```

`csum` is the 16-bit ones'-complement sum of the 32 payload half-words,
inverted, in the style of UDP. The header itself is not covered. A receiver
drops a frame, and reports the drop, when any of these holds:
* it is not addressed to its own IP address;
* it carries another protocol;
* its checksum fails;
* it does not have exactly eleven beats starting with start-of-packet.

`net_mux` sends the two regions' frames in packet-level round robin. It holds
the grant from a frame's first beat to its last. On receive it routes each
frame by its protocol byte. A frame of an unknown protocol is consumed and
counted.

Connection ids are cluster-wide: both ends of a connection use the same id,
and the id travels in the header. `NUM_CONN` is 128 by default, which holds
a full mesh of 12 servers (66 pairs).

## Remote memory

The object table of `rdma_interface` maps an object id to `{valid, base line
address, size in lines}`. Host software writes it when a function leaves an
output object behind.

* **Requester.** The host issues `{op, conn, obj, offset, tag, data}`, where
  op is READ or WRITE (`rdma_req_*`). The engine sends a request frame to
  the connection's peer. It returns a completion `{op, tag, data}`
  (`rdma_cpl_*`) when the answer arrives:
  * DATA with the line, for a READ;
  * ACK, for a WRITE;
  * NACK, if the peer refused.

  A request on a connection that is not open completes at once with NACK
  (its data field all ones), and nothing is sent. Several requests may be
  outstanding; the tag tells their completions apart.
* **Responder.** An incoming request is checked: the object must be valid
  and the offset below its size, or the answer is NACK. A READ reads the line
  at `base + offset` over the memory port and answers DATA. A WRITE writes the
  line and answers ACK. The answer goes to the request's source address with
  the ports swapped. The responder serves one request at a time, and its
  answers go ahead of new local requests on the transmit stream.

The memory port (`mem_rd_*`, `mem_rsp_*`, `mem_wr_*`) is a plain line
read/write port. Keeping host caches coherent with what the fabric writes is
left to the coherent host link, which is outside this RTL.

## Host register port

`csr_addr[15:12]` selects a region. Writes take one cycle; reads are
combinational.

| Address | Content |
|---|---|
| `0x0000` | local IPv4 address |
| `0x0001` | batch size in lines, clamped to 1..`MAX_BATCH` (reset 1) |
| `0x0002` | active flows, clamped to 1..`NUM_FLOWS` (reset `NUM_FLOWS`) |
| `0x0003` | usable transmit queue size `tx_qsize`, clamped to 1..`QDEPTH` (reset `QDEPTH`) |
| `0x0004` | load balancing: 0 static by connection, 1 round robin (reset 0) |
| `0x0005` | flush timeout in cycles (reset 64) |
| `0x0006` | enable (reset 0: nothing moves until it is set) |
| `0x0007` | usable receive queue size `rx_qsize`, clamped to 1..`QDEPTH` (reset `QDEPTH`) |
| `0x1nnn` | connection `nnn`: `{valid[63], remote_ip[62:31], remote_port[30:15], local_port[14:0]}` |
| `0x2nnn` | object `nnn`: `{valid[63], lines[55:32], base[31:0]}` |
| `0x3nnn` | packet counters of connection `nnn`: `{tx[63:32], rx[31:0]}`; any write clears all counters |
| `0x4000` | dropped frames and RPCs (all causes) |
| `0x4001` | number of open connections |
| `0x4002`..`0x4006` | mechanism counters: full batches, timed-out batches, requests balanced round robin, cycles a received RPC waited on a full flow queue, NACKs sent by the remote-memory responder; cleared with the packet counters |

The local port is written as 15 bits so that an entry fits one 64-bit
write. Its top bit reads as zero.

## What comes from the published description and what does not

Taken from the description of the system:
* the split into a NIC region and a remote-memory region, with these blocks
  in them: CPU-NIC interface, queues, RPC, transport, connection manager,
  packet monitor, and RDMA interface;
* both regions joining at one PHY;
* the 64-byte RPC;
* the list of run-time tunables: batch size of host transfers, provisioning
  of the transmit and receive queues, number of active flows, and
  load-balancing scheme;
* the object-id address mapping done in the fabric;
* the RoCE-like protocol style;
* UDP as the transport.

The description names these blocks and what they are for, but not how they
work inside. Everything below is this design's own and can be changed
without contradicting it:
* the frame format and checksum;
* the batching rule and flush timeout;
* the two load-balancing schemes;
* the drop rules;
* the register map;
* the one-line remote-memory operations with ACK/NACK;
* cluster-wide connection ids;
* the packet monitor's counters. The monitor is only named, so its function
  is a guess.

The sizes (`NUM_FLOWS` 4, `NUM_CONN` 128, `NUM_OBJ` 16, `QDEPTH` 64,
`MAX_BATCH` 8) are also chosen here, since no sizes are published.

Not built:
* a TCP transport. The system selects it by loading a different bitstream;
  only the UDP variant is here;
* the vendor shell that carries host traffic over the coherent link;
* the Ethernet PHY;
* run-time changes to the queue count, and partial reconfiguration. The
  queue *sizes* are registers. The queue *count* is fixed by `NUM_FLOWS`,
  and `active_flows` chooses how many are used.

The published figures of 12.4 M RPCs per second from one core and a 2.1 µs
round trip cannot be checked against this RTL, because no clock frequency is
given. At one 11-beat frame per RPC, the 64-bit stream would need at least
136.4 MHz to carry 12.4 M RPCs per second.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/hm_pkg.sv tb/tb_top.sv --top-module tb_top -Mdir obj_tb_top
./obj_tb_top/Vtb_top
```

Replace `tb_top` with any other testbench name. Stimulus comes from
`$urandom`; `+verilator+seed+N` picks another seed.

| Testbench | What it checks |
|---|---|
| `tb_sync_fifo` | order, full/empty, run-time size limit, against a queue model |
| `tb_soft_regfile` | reset values, write/read-back, clamping |
| `tb_connection_manager` | open/close, all lookup ports, open count |
| `tb_packet_monitor` | same-cycle events from several sources, drops, clear |
| `tb_cpu_nic_if` | per-flow queuing, host back-pressure, full and flushed batches, `last` flag |
| `tb_rpc_unit` | flow arbitration, drops, both load-balancing schemes, response steering, stalls |
| `tb_transport` | header and checksum, back-to-back frames, each kind of bad frame dropped |
| `tb_net_mux` | packet-atomic arbitration, routing by protocol, unknown protocol dropped |
| `tb_rdma_interface` | two engines back to back: reads, writes, remote and local NACK, against a reference memory |
| `tb_top` | two complete fabrics linked PHY to PHY (below) |
| `tb_cluster` | twelve fabrics behind a top-of-rack switch model, full mesh of 66 connections, every server calling every other; all calls answered, no drops, counters add up |

`tb_top` runs the whole design at its default sizes. Two nodes are
configured through their register ports with different flow counts, batch
sizes, queue sizes and balancing schemes. Both then act as RPC client and
server at once, while node A also reads and writes node B's objects. The
checks are:
* every response reaches the issuing flow with the expected payload;
* requests on a connection that is closed at either end are dropped;
* a frame corrupted on the link is dropped by its checksum;
* every remote-memory completion matches a reference memory;
* the counters read back over the register port match the traffic, and the
  mechanism counters match what the testbench saw happen.

It also counts, and requires at least once, each of these mechanisms:
* full and flushed batches;
* static and round-robin balancing;
* a receive stall on a full flow queue;
* host back-pressure;
* transmit and receive drops;
* a checksum drop;
* a remote-memory NACK;
* both regions contending for the PHY.

It prints the shortest round trip it saw, from host write to response at the
host. That is 185 cycles under its load, most of it the flush timeouts.

## Limits worth knowing

* `rpc_unit` and `cpu_nic_if` decide within one cycle from the queue heads.
  With many flows, this round-robin search is the longest path.
* The responder serves one remote-memory request at a time. A slow host
  memory therefore limits remote-memory throughput per server.
* The checksum covers only the payload. A corrupted header is caught only if
  it breaks the address, protocol or port checks.
