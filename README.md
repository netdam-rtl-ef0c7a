# NetDAM: memory that executes network packets

A NetDAM device is a block of memory placed directly behind an Ethernet port,
with a small programmable engine between the two. The engine does not just
move data in and out, as a NIC doing RDMA would. Each packet that reaches the
device carries an instruction, a memory address and data, and the device
executes that instruction against its own memory. READ, WRITE,
compare-and-swap and copy are supported, and so are float32 vector
arithmetic, block hashing and collective-communication steps. No host CPU,
PCIe transfer or cache snoop sits in the path, so the time a request takes
depends only on the instruction and the memory, not on what the host is
doing.

A packet can also carry a list of nodes to visit. After executing the
instruction, a device forwards the (possibly modified) packet to the next node
in that list. This turns a chain of devices into a pipeline. The main example
is a ring allreduce, in which a block of numbers travels around the ring and
each device adds its own block to the packet as it passes.

This repository holds synthesizable SystemVerilog for one such device, its
testbenches, and a four-device simulation that runs a complete ring allreduce.
It follows the published NetDAM architecture description. That description
gives the instruction set, the packet fields and the reduce-scatter/all-gather
behaviour, but no widths, encodings or internal structure. Everything at that
level of detail here is this implementation's own choice. Each choice is
listed in the section on departures below and in the opening comment of the
file it affects.

## 1. The packet

A packet travels on a 512-bit stream (`pkt_beat_t` = `{sop, eop, data[511:0]}`
with valid/ready). The first beat is the header. The following beats are
data, 16 float32 elements per beat. A packet holds at most 2048 elements
(128 data beats), which is about what a 9000-byte jumbo frame holds. The
header (`netdam_hdr_t` in `rtl/netdam_pkg.sv`) is laid out from the most
significant bit down:

| field      | bits | meaning |
|------------|------|---------|
| `seq`      | 32   | sequence number. It is copied into the response so the requester can match answers. |
| `seg_left` | 8    | segment routing: how many segments are still to visit |
| `segs`     | 8×32 | segment routing: node ids. `segs[seg_left-1]` is the next hop. |
| `opcode`   | 8    | instruction. Bit 7 set marks a response. |
| `status`   | 8    | response status: 0 OK, 1 unknown opcode, 2 CAS mismatch, 3 bad route |
| `len`      | 16   | number of float32 elements. It is rounded up to whole beats. |
| `addr`     | 64   | byte address in the device's memory, 64-byte aligned |
| `hash`     | 32   | block hash. A reduce-scatter carries it; a BLOCK_HASH response returns it. |
| `src_node` | 32   | node that receives responses and ACKs (the controller) |
| `pad`      | 56   | zero |

The sequence number, segment list, instruction, address and data are the
fields of the original format, in that order. `status`, `len`, `hash` and
`src_node` are additions this implementation needs. Node ids are 32 bits wide
so that an IPv4 address can serve as one. The IP/UDP/Ethernet encapsulation
around the packet belongs to the Ethernet controller and is not part of this
RTL.

## 2. The instructions

| opcode | name       | effect |
|--------|------------|--------|
| 0x01 | WRITE      | payload → memory[addr…]; ACK |
| 0x02 | READ       | memory[addr…] → response data |
| 0x03 | CAS        | 32-bit compare-and-swap on element 0 of the beat at addr. Payload element 0 is the expected value and element 1 the new one. The old beat is returned, with status 2 if it did not match. |
| 0x04 | MEMCOPY    | copies `len` elements from addr to the byte address in the low 64 bits of the first payload beat; ACK |
| 0x10–0x15 | ADD, SUB, MUL, XOR, MIN, MAX | element-wise `memory = memory OP payload` (float32; XOR is bitwise); ACK |
| 0x20 | RSCATTER   | one step of a ring reduce-scatter (section 3) |
| 0x21 | ALLGATHER  | one step of a ring all-gather (section 3) |
| 0x22 | BLOCK_HASH | CRC-32 of the addressed block, returned in the header's `hash` field |
| 0x40–0x7F | (free) | left for user-defined instructions. These are not implemented; a device answers them with status 1. |

A response has the request's header with bit 7 of the opcode set. It goes
back the way the request came. A request from the local host's Request Queue
is answered into the Complete Queue. A request from the network is answered
to `src_node` over the network. A response that arrives from the network is
always handed to the local host's Complete Queue.

## 3. Chained computation: ring reduce-scatter and all-gather

The hardest part of the design, and its point, is how a reduction runs
through several devices without any host taking part. Take four nodes, each
holding a block: A1 on node 1, B1 on node 2, C1 on node 3 and D1 on node 4.
The goal is for node 4 to end up with A1+B1+C1+D1.

1. **First node.** The controller writes an RSCATTER packet with no payload
   into node 1's Request Queue. Its segment list is `[node4, node3, node2]`
   with `seg_left = 3`, and it carries the hash of D1 (see below). Because the
   packet came from the host, node 1 loads A1 from its memory into the packet
   buffer. It pops the next segment (node 2) and sends the packet there.
2. **Intermediate nodes.** Node 2 reads B1 and adds it to the payload
   *inside the packet buffer*. Node 2's memory is never written. It then
   forwards the packet to node 3, which does the same with C1. Because nothing
   is stored, a repeated packet causes no side effect, so these steps are
   idempotent.
3. **Last node.** Node 4 receives the packet with `seg_left = 0`. While
   adding D1 it also hashes D1 as it reads it from memory. If that hash equals
   the hash in the packet, the local block is still the original D1, and the
   sum is written to memory and an ACK goes to `src_node`. If it differs, the
   block has already been replaced by an earlier copy of this packet (a
   retransmission), and the packet is dropped. This makes the one
   non-idempotent step safe to repeat. The controller gets the hash in
   advance with a BLOCK_HASH instruction on node 4.

All-gather then spreads the reduced block. The owner's host posts an
ALLGATHER with no payload. The owner loads its block and sends it along the
segment list. Every other node writes the payload into its memory and
forwards it. The last node writes it and sends an ACK to the controller.

A full ring allreduce over N nodes runs N such chains at once, one per chunk,
each starting one node further along the ring. `tb/tb_netdam_top.sv` does
exactly this with four devices and four chunks of 2048 elements, then checks
every chunk of every node bit for bit. During the run its switch model
deliberately delivers one last-hop packet twice, and the duplicate must be
dropped.

## 4. Inside one device

```
           net_rx ──┐                                   ┌── net_tx (+ next-hop id)
                    │                                   │
 host_rq ─ qp_queue ─ pool_router ──(remote, pool mode)─┤ pkt_arbiter (u_txarb)
            (RQ)        │ local                         │
                        ▼                               │
                 pkt_arbiter (u_arb) ──► netdam_engine ─┴─► qp_queue (CQ) ─ host_cq
                                          │  pkt_buffer
                                          │  simd_alu (16 × fp32_alu)
                                          │  block_hash
                                          │  sr_router
                                          ▼
                                        mem_* (HBM/DRAM port)
```

| module | role |
|--------|------|
| `netdam_top`    | one device; all ports are plain signals and structs |
| `qp_queue`      | Request Queue and Complete Queue: FIFOs of beats, 256 deep |
| `pool_router`   | host request path. In pool mode it translates global addresses and sends requests for other devices to the network. |
| `gva_xlate`     | block-interleaved global-address translation (section 6) |
| `pkt_arbiter`   | packet-level round robin. It merges network and host packets into the engine, and engine output and remote pool requests onto the network. |
| `netdam_engine` | decodes and executes one packet at a time |
| `pkt_buffer`    | 128 × 512-bit SRAM holding the current packet's payload |
| `simd_alu`      | 16 float32 lanes with one register stage |
| `fp32_alu`      | one lane: ADD, SUB, MUL, MIN, MAX, XOR |
| `block_hash`    | CRC-32 over 512-bit beats, one beat per clock |
| `sr_router`     | pops the segment list and flags the last hop |

## 5. The engine: sequencing and timing

`netdam_engine` is a sequencer. It receives a whole packet into the packet
buffer (store and forward). It then runs one or two *passes* over the
addressed beats, and finally transmits a response or the forwarded packet
from the buffer. There are two kinds of pass.

Passes that only move data are *streamed*: WRITE, READ, BLOCK_HASH, and the
sum, load and store passes of reduce-scatter and all-gather. In `S_PSTR` the engine
issues one memory request per clock and keeps up to `MAX_RD` (32) reads in
flight. Read data comes back in order, is folded into the block hash, and
goes through the SIMD adder when the pass is a sum. It is then written back
into the packet buffer. `S_PDRAIN` waits for the last response.

Read-modify-write passes go one beat at a time: the element operations, CAS
and MEMCOPY. The sequence is `S_PBUF` (read packet buffer) → `S_PRD` (memory
read request) → `S_PWAIT` (wait for the data) → `S_PALU` (ALU result) →
`S_PWR` (memory write) → `S_PNEXT`. This keeps a write from overtaking the
read of the same beat.

A reduce-scatter at the last hop runs a sum pass and then, if the hash
matches, a store pass. Reads are answered in order after any latency.

With memory read latency L clocks and no back-pressure, the time from
accepting the header of an n-beat READ to presenting the response header is
`6 + n + L` clocks. The engine shares nothing with other traffic while it
works on a packet. This is this implementation's form of the "fixed
pipeline, deterministic latency" property the architecture claims.
`tb_netdam_engine` checks the formula for reads of one, two (32 elements)
and three beats, and checks that repeated reads take exactly the same time.

Throughput is the weak point. A streamed pass runs at one 64-byte beat per
clock, 153.6 Gb/s at 300 MHz. But the engine is store-and-forward and does
one thing at a time: it receives a packet, runs its passes, then sends it.
A forwarded 128-beat packet therefore costs about 3 × 128 + L clocks, or
roughly 51 Gb/s. Element operations manage one beat per L + 5 clocks or so,
about 6 Gb/s with L = 20. Both are below the 100 Gb/s port of the prototype the
architecture was built on. The next step for real use would be to overlap
receive, execute and transmit of different packets, using two packet
buffers.

## 6. The memory pool

Several devices behind a switch can act as one large memory. With
`pool_mode` high, the address in a host's WRITE, READ, CAS, MEMCOPY,
element-operation or BLOCK_HASH request is a global address. `gva_xlate`
splits it into 8 KiB blocks and deals them round-robin over the `NDEV` pool
devices:

```
block = gva / 8192;   device = block mod NDEV;   local = (block / NDEV)·8192 + gva mod 8192
```

`pool_router` rewrites the header with the local address. It keeps the packet
if the block is local. Otherwise it sends the packet to the owning device,
with `src_node` set to this device so that the answer comes back to this
host's Complete Queue. Spreading consecutive blocks over all devices keeps
many senders from converging on one device (incast). Reduce-scatter and
all-gather carry explicit node lists and local addresses and are never
translated. An access must not cross an 8 KiB block.

## 7. Float32 arithmetic

`fp32_alu` rounds ADD, SUB and MUL to nearest, ties to even. Subnormal
operands are read as zero and subnormal results are flushed to signed zero,
a common simplification in accelerators. Any NaN input, inf−inf and 0×inf
give the quiet NaN `0x7FC00000`, and overflow gives a signed infinity. MIN
and MAX treat −0 as smaller than +0. The testbenches compare against a
reference that computes in double precision and rounds to float32 by hand.
For sums and products of two float32 values this gives the correctly rounded
result.

## 8. What is outside the RTL

- **Ethernet MAC/PHY and IP/UDP framing.** `net_rx_*` and `net_tx_*` carry
  bare NetDAM packets. `net_tx_dst` gives the node id of the next hop, from
  which the controller forms the IP/UDP header.
- **Host bus (PCIe/CXL/CHI/AXI).** `host_rq_*` and `host_cq_*` are the two
  queue streams. How the host reaches them, for example through a
  memory-mapped window, is left to that interface.
- **HBM/DRAM and its controller.** `mem_*` is a port of 64-byte beats.
  `tb/hbm_model.sv` is a behavioural model with fixed latency and optional
  random back-pressure.
- Not built at all: the memif shared-memory packet interface, reliable
  retransmission and reordering by sequence number, access-control lists and
  encryption instructions, and the extra instructions named only as examples
  (compression, crypto, hashing for offload, longest-prefix match,
  multicast all-gather). The architecture mentions these only as optional
  or future additions. The switch-side address translation and the
  rate-limited pull of pooled data by the receiving host are not built
  either. The pool's block interleaving, which spreads the load, is built;
  pacing the reads is left to host software.

## 9. Departures and limits

- Widths, opcode values, the header layout, the CRC-32 block hash, the
  16-lane beat, the SRv6-style segment list (8 entries) and the queue depths
  are all chosen here. The architecture gives none of them.
- CAS works on 32 bits, MEMCOPY takes its destination from the payload, and
  the element operations write `memory OP payload` back to memory. These
  semantics are this design's.
- A committed reduce-scatter also sends an ACK to `src_node`. The original
  description mentions an ACK only for all-gather.
- Lengths are rounded up to whole 16-element beats, and addresses are taken
  as 64-byte aligned.
- One packet is in the engine at a time, and throughput is well below line
  rate (section 5).
- The element type is float32 only.

## 10. Simulating and changing it

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself,
with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/netdam_pkg.sv tb/fp_ref_pkg.sv tb/netdam_tb_pkg.sv tb/tb_netdam_top.sv \
    --top-module tb_netdam_top
./obj_dir/Vtb_netdam_top
```

Use the same command for `tb_fp32_alu`, `tb_simd_alu`, `tb_block_hash`,
`tb_sr_router`, `tb_pkt_buffer`, `tb_qp_queue`, `tb_gva_xlate` and
`tb_netdam_engine`. `tb_netdam_top` runs the four-device allreduce at the
top's default parameters. It takes about a minute and a half to build and a
fraction of a second to run. It prints the cycle counts of the two phases
and how often each mechanism occurred: forwards, dropped duplicates,
arbitration contention, memory stalls and network stalls.

Parameters: `netdam_top` has `MEM_AW` (memory beat-address bits, 25 = 2 GB),
`BUF_DEPTH` (packet buffer beats, 128 = 2048 elements), `RQ_DEPTH` and
`CQ_DEPTH`, and `NDEV` and `POOL_BLOCK` for the pool. `netdam_engine` also
has `MAX_RD`, the number of memory reads a streamed pass keeps in flight
(32); raise it if the memory latency is longer than that. `LANES`, `NSEG` and
`MAX_ELEMS` are package constants in `netdam_pkg`, because the header layout
and beat width depend on them. A new instruction needs an opcode in
`opcode_e`, a case in the `S_DECODE` state of `netdam_engine`, and, if it
runs a pass, a case in `S_POST`.
