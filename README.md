# The EPAC uncore in SystemVerilog

EPAC is a 22 nm RISC-V test chip that puts three kinds of compute tile on one
die: vector tiles (VEC), a stencil/tensor tile (STX) and a variable-precision
tile (VRP). The tiles share one coherent memory system. A CHI network-on-chip
joins them to four slices of a distributed L2 cache. Each slice carries the
coherence home node (HN) for its share of the address space. The chip has no
memory controller: every L2 miss leaves through a chip-to-chip (C2C) link to an
FPGA that holds DDR4/HBM memory.

This repository gives RTL for that shared part, the *uncore*:

- the crosspoint mesh;
- the L2 slices with their far-atomic ALU and address interleaving;
- the full-map directory and the home-node transaction engine;
- the CRC-protected, retransmitting C2C link;
- the register-renaming units of the vector and variable-precision tiles.

The compute tiles themselves are not included, apart from their
register-renaming units. Their cores, vector unit and FPU are third-party or
separately published designs that the chip integrates rather than describes. The top module `epac_top` brings out the seven mesh ports
where those tiles attach. A tile, or a testbench acting as one, plugs into them
as a CHI request node (RN) with a private cache.

## 1. Floor plan of the mesh

The mesh has 3 columns and 2 rows of crosspoints (XPs). Each XP has four mesh
links and two device ports. The placement follows the chip's block diagram:

|        | x = 0                 | x = 1               | x = 2                    |
|--------|-----------------------|---------------------|--------------------------|
| y = 0  | STX0 (0), STX1 (1)    | L2/HN 0 (2), free   | AVS/VPU 0 (4), L2/HN 1 (5) |
| y = 1  | VRP (8), C2C (9)      | L2/HN 2 (10), free  | AVS/VPU 1 (12), L2/HN 3 (13) |

The number in brackets is the node id. A node id is the 4-bit field
`{y[0], x[1:0], port}`, so it equals `8y + 2x + port`.

- Request-node ports: ids 0, 1, 3, 4, 8, 11 and 12. They appear on `epac_top`
  as `rn_*[.][k]`, with `k` indexing the list `RN_NODE` in that order.
- Ids 3 and 11 are the free device ports of the two middle XPs. They are
  exposed too, for JTAG/SPI, PIC/CLINT or a debug master.
- Home nodes: ids 2, 5, 10 and 13.
- C2C link: id 9.

## 2. Flits, channels and node ids (`epac_pkg`)

Every XP carries four independent channels. Each channel has its own wires,
buffers and credits:

| channel | carries |
|---------|---------|
| REQ (0) | ReadShared, ReadUnique, Atomic, Evict from RNs; ReadNoSnp from HNs to memory |
| RSP (1) | Comp (completion without data), SnpResp (clean snoop answer) |
| SNP (2) | SnpShared, SnpUnique from an HN to an RN |
| DAT (3) | CompData, WriteBack, SnpRespData, MemData, WriteNoSnp |

A flit is one packed struct, `flit_t` (577 bits):
`{tgt, src, txn[7:0], op[4:0], resp[3:0], addr[39:0], data[511:0]}`.

- A whole 64-byte line moves in one flit, as on the chip, whose NoC moves one
  line per port per cycle.
- `resp` carries the granted state (S = 1, E = 2) on CompData.
- On an Atomic request, `resp` carries the atomic opcode and `data[127:0]`
  carries the operand and compare value.

The opcode set is a small subset of AMBA 5 CHI, with CHI's names. Their binary
encodings are this design's own.

## 3. Crosspoints and credits (`noc_xp`, `noc_ep_rx`, `noc_ep_tx`, `noc_mesh`)

Each channel of an XP is a 6 x 6 switch with these parts:

- **Input FIFO.** Every input has a 4-entry FIFO (`noc_ep_rx`). It returns one
  credit pulse upstream for every flit it hands on.
- **Output credit counter.** Every output starts with 4 credits (`noc_ep_tx`).
  It sends only while it holds a credit.
- **Routing.** Routing is dimension order, X first. A flit moves E or W until
  its column matches, then N or S, then leaves on the device port in its
  target id. Routing X-first on a mesh cannot deadlock within a channel.
- **Arbitration.** Each output takes one flit per cycle. When several inputs
  want the same output, a round-robin pointer picks among them.

A flit spends 2 cycles per XP when the path is free: one in the input FIFO and
one in the output register. A corner-to-corner trip (4 XPs) from the sending
port to the target port therefore takes 8 cycles.

The same link protocol is used everywhere:

- A link is `valid` plus `flit`, with `credit` flowing back.
- Ports at the mesh edge are tied off.
- A device on a port starts with 4 credits per channel. It must pulse `credit`
  back once for every flit it receives.

`noc_mesh` wires six XPs with `X`/`Y` set from their position. It exposes 12
device ports.

The chip's NoC also multicasts snoops. Here a home node sends one snoop flit
per sharer instead.

## 4. The L2 slice (`l2_slice`, `l2_plru`, `l2_atomic_alu`)

**Organisation.** Each slice is 256 kB, 8-way set associative, with 64-byte
lines, so it has 512 sets. It is write-back and write-allocate, with tree
pseudo-LRU replacement. The data path is 512 bits wide, so a whole line is
read or written in one access.

**Memories.** The data array has 4096 lines of 512 bits. Metadata is kept
per set in one word: 8 tags, 8 valid bits, 8 dirty bits and 7 pseudo-LRU bits.
Neither array has a reset. Instead, after reset the slice spends 512 cycles
clearing one metadata word per cycle, with `req_ready` held low.

**Requests.** There are three kinds:

- a line read;
- a full-line write;
- an atomic on one 64-bit word.

`l2_atomic_alu` performs the atomic inside the cache and returns the old word.
It supports ADD, CLR, EOR, SET, SMAX, SMIN, UMAX, UMIN, SWAP and CAS, the CHI
AtomicLoad/Swap/Compare set.

**Timing.** A hit takes 3 cycles from request to response:

1. take the request;
2. look it up, and write on a hit;
3. respond.

On a miss, the slice picks an invalid way if there is one, otherwise the
pseudo-LRU victim. It then:

- reports the victim on `evict_*`, so that the home node can back-invalidate it;
- writes the victim to memory if it is dirty;
- fetches the new line, unless the request is a full-line write;
- retries the lookup, which now hits.

`rsp_set` and `rsp_way` tell the home node which tag entry holds the line. The
home node uses that pair to index its directory.

**Difference from the chip.** The chip's slice is non-blocking and fully
pipelined, with 128 outstanding transactions (64 misses and 64 evictions).
This slice serves one request at a time. It therefore has the chip's capacity
and hit latency, but not its throughput under misses.

## 5. Address interleaving (`l2_interleave`)

Every RN port of `epac_top` passes its REQ flits, and its WriteBack DAT flits,
through an `l2_interleave`. That block replaces the target with the home slice
that owns the address. The mode is set by the `interleave_mode` input:

| mode | slice index |
|------|-------------|
| 0 | `addr[7:6]`: consecutive lines rotate over the 4 slices |
| 1 | `addr[13:12]`: 4 kB pages rotate |
| 2 | `addr[7:6] ^ addr[13:12] ^ addr[21:20]`: hashed, so that power-of-two strides spread |
| 3 | every line to slice 0 |

The chip's L2 has "programmable address interleaving modes". These four modes
are this design's reading of that phrase.

## 6. Home node and directory (`hn_directory`, `l2hn_node`)

This is the heart of the design and the part with the most states.

### Directory

The L2 is inclusive: every line held in any RN cache is also in the L2. So the
directory needs no tags of its own. It keeps, beside each L2 tag entry
(set, way):

- 16 presence bits, one per possible node id;
- a state: I (no RN copy), S (one or more read-only copies) or U (one RN holds
  the line exclusively, clean or dirty).

This is a MESI-like protocol. M and E are merged from the home's point of
view, because the home cannot tell whether an exclusive copy has been written.

`hn_directory` has two paths, as on the chip:

- **Request path.** One request per cycle. Its result (snoop mask, snoop
  kind, granted state) is registered and appears one cycle later.
- **Response path.** Handles an RN dropping a line: it clears one presence
  bit.

Both paths can act in the same cycle. If both touch the same entry, the
response is applied first. Like the L2 metadata, the entries are cleared one
per cycle after reset (4096 cycles). The directory raises `ready` when done.

The request path decides as follows:

| request | state found | snoops | new state | grant |
|---------|-------------|--------|-----------|-------|
| ReadShared | I | none | U {req} | E |
| ReadShared | S | none | S +req | S |
| ReadShared | U, other RN | SnpShared to owner | S {owner, req} | S |
| ReadShared | U, requester | none | U | E |
| ReadUnique | any | SnpUnique to every other holder | U {req} | E |
| Atomic | any | SnpUnique to every holder, requester included | I | (old word) |
| back-invalidate | any | SnpUnique to every holder | I | - |

### Transaction engine (`l2hn_node`)

`l2hn_node` is one mesh device: a slice, its directory, and an rx/tx endpoint
per channel. It serves one transaction at a time, in this order:

1. **Pick.** Write-backs arriving on DAT go into a 12-entry queue, which has
   priority over new requests on REQ. A request is taken only when the queue is
   empty. A write-back in flight therefore never waits behind a request that
   might snoop the RN that sent it.
2. **L2 access.** The engine sends a read, a full-line write (WriteBack) or an
   atomic to the slice. A miss fetches from memory through the C2C node:
   ReadNoSnp out on REQ, MemData back on DAT. A dirty victim goes out as
   WriteNoSnp and waits for Comp.
3. **Back-invalidation.** If the fill evicted a valid line, the engine looks
   up that line's directory entry (the BACK_INV request). It sends SnpUnique
   to every RN that still holds the line, and collects their answers. If one
   answers with dirty data (SnpRespData), that data is written to memory at
   once (T_MEMWR). The original L2 access is then redone, because the way it
   used is now free.
4. **Directory.** The engine sends the directory the request kind for the
   transaction. An Evict or a WriteBack goes through the response path instead
   and clears the sender's bit.
5. **Snoops.** One snoop flit goes to each bit set in the mask. The engine then
   waits for as many SnpResp/SnpRespData. Dirty data is merged into the L2
   line, and the line is written back into the slice (T_FIX) before the reply.
   For an atomic, the snoops come before the atomic is applied, so that the
   ALU sees the latest data.
6. **Reply.** The requester receives CompData (with the granted state, or the
   old word for an atomic) or Comp.

Counters `cnt_miss`, `cnt_snoop` and `cnt_backinv` record L2 misses, snoops
sent and back-invalidations. They are visible at the top as `l2_misses`,
`hn_snoops` and `hn_backinv`.

### What an RN must do

An RN attached to a port must follow these rules:

- Answer every snoop: SnpRespData if it holds the line dirty, otherwise
  SnpResp.
- Downgrade its copy to S on SnpShared, or drop it on SnpUnique.
- Keep the data of a WriteBack until the Comp for it arrives, and answer
  snoops from that data meanwhile. A snoop can overtake a write-back.
- Have at most one request outstanding per line.

The chip's HN is fully pipelined. This one is not. It also has no CompAck
handshake, which is why an RN must not have two requests to one line in flight.

## 7. The chip-to-chip link (`c2c_link`)

The same module sits at both ends of the link. It tunnels flits of all four
channels over 8 lanes of 32 bits.

**Frames.** A frame holds a 598-bit body plus a CRC-32 (polynomial
04C11DB7). The body contains:

- a data flag and an 8-bit sequence number;
- an acknowledgement: a valid bit and the last in-order sequence number
  received;
- a NAK bit;
- the channel and the flit.

A frame takes 3 beats, and `tx_sof` marks the first. When there is nothing to
send, the link sends idle frames so that acknowledgements keep flowing.

**Retransmission (go-back-N).**

- **Sender.** Keeps up to 8 unacknowledged frames in a replay buffer. It
  rewinds to the oldest one on a NAK, or after 32 frames without progress.
- **Receiver.** Delivers only frames whose CRC is good, whose sequence number
  is the expected one, and for which its 8-entry channel queue has room. It
  drops anything else and sends one NAK.

Flits therefore arrive once and in order. When several channels have a flit
to send, DAT goes first, then SNP, RSP and REQ. A response channel is never
starved by requests.

**Bandwidth.** One flit with a full line every 3 beats. The lanes carry at
most 8 x 25 Gb/s. This limits the parallel side to about 0.78 G beats/s, which
gives 16.7 GB/s of line data in each direction. The prototype demonstrated
20 GB/s aggregate. `stat_crc_err` and `stat_replay` pulse on every bad frame
and every rewind.

The serialisers, clock recovery and lane alignment belong to the SerDes
macros. This block drives their parallel side.

## 8. Register renaming in the tiles (`reg_rename`)

Two of the tiles rename registers, and that small piece of their pipelines is
given here:

- The vector unit of each VEC tile has 40 physical vector registers for the
  32 architectural ones. The 8 spares let a few writes proceed before the
  software has to spill.
- The VRP unit maps its P-registers onto 64 physical ones. It uses a
  scoreboard so that independent operations overlap slow high-precision ones.

`reg_rename` covers both. Its parts:

- a map table (identity after reset);
- a circular free list of the spare registers;
- one ready bit per physical register.

Renaming an instruction does the following in one cycle, combinationally:

- it reads the mappings and ready bits of both sources;
- if the instruction writes a register, it gives the head of the free list as
  the new destination, and reports the register it replaces.

The replaced register returns to the free list only when the instruction
retires (`rel_*`). Before that, an older instruction may still read it.
A result write (`wb_*`) sets the ready bit.

With the free list empty, a writing instruction stalls: `ren_ready` is low.
The 32 architectural registers and the release-at-retire rule are this
design's assumptions for the VRP unit, since the chip gives only its 64
entries.

The top instantiates three units: for VPU 0, VPU 1 and VRP. Their ports are
brought out as `ren_*`, `rel_*` and `wb_*` arrays, indexed by unit, where the
tile pipelines would connect.

## 9. The top (`epac_top`)

`epac_top` contains:

- the mesh;
- four `l2hn_node`s, with `MY_NODE` = 2, 5, 10, 13 and `MEM_NODE` = 9;
- the C2C link behind endpoint adapters on node 9;
- the address-map rewrite on the seven RN ports;
- the three renaming units.

Parameters `L2_SIZE_KB` (256) and `L2_WAYS` (8) set every slice.
`VPU_PREGS` (40) and `VRP_PREGS` (64) set the renaming units.

## 10. Where this RTL departs from the chip

- **L2 slice.** It is blocking: one request at a time, not 128 outstanding.
  It has no cache-maintenance operations, no non-temporal hints, no direct
  memory transfer and no SECDED.
- **Home node.** It is a sequential engine, not a pipeline. It has no CompAck,
  no DMT, no snoop filter beyond the full map, and no support for Evict of a
  line the L2 no longer holds. Evict goes through an L2 lookup like a read, so
  it may allocate the line.
- **NoC.** No snoop multicast. Flit fields are cut down to what this protocol
  subset needs. Only REQ and WriteBack targets are rewritten at the RN ports.
- **C2C link.** The frame format, CRC polynomial, lane width, window and
  timeout are this design's own choices. The chip gives only 8 lanes, CRC
  packets and link-level retransmission.
- **Interleaving.** The four modes are invented. The chip only says the modes
  are programmable.
- **Free device ports.** The mesh links every neighbour pair. The chip's
  diagram draws vertical links only at the outer columns. The free device
  ports of the middle XPs are exposed as RN ports.
- **Tiles.** Apart from register renaming, none of the compute tiles is
  implemented: not Avispado, the rest of its VPU, Gazillion or the FPU; not
  STX with Snitch, SSR, FREP and TCDM; not the rest of VRP. No I/O block is
  implemented either: PIC, CLINT, JTAG/SPI or pads.

## 11. Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Build and run one with
plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/epac_pkg.sv rtl/*.sv tb/tb_epac_top.sv --top-module tb_epac_top
./obj_dir/Vtb_epac_top
```

| testbench | what it shows |
|-----------|---------------|
| `tb_noc_xp` | Routing from every port to every target. 2-cycle latency per XP. Random back-pressure. Every flit out once, in order per input and output. |
| `tb_noc_mesh` | Random traffic between all 12 ports on all channels. 8-cycle corner-to-corner latency. Per-source order kept. |
| `tb_l2_slice` | Against a reference memory: hits, misses, dirty evictions, write allocation, all atomics. 3-cycle hit latency. |
| `tb_l2_atomic_alu` | Every atomic opcode against an independent model. |
| `tb_l2_interleave` | All four modes against their formulas. |
| `tb_hn_directory` | Grants and snoop masks against a per-RN reference, including a response and a request on the same entry in one cycle. |
| `tb_c2c_link` | Two ends back to back with random bit errors on the lanes. Every flit delivered once and in order. CRC errors and replays observed. 3 cycles per flit when error-free. |
| `tb_l2hn_node` | One HN (1 kB, 2 ways, to force evictions) with six cache-holding RNs and a memory. Data coherence, E/S grants, dirty snoops, back-invalidation, write-backs, atomics. |
| `tb_reg_rename` | 32 on 40 registers against a model of map, free list and ready bits, in every cycle. Distinct mappings. Stall on an empty list and resume. |
| `tb_epac_top` | The whole uncore at full size (four 256 kB slices). Four RNs and a far-end C2C link with memory. Checks the latest data on every read, atomics, and uniqueness after ReadUnique. Also checks that each mechanism happened: L2 miss, memory read/write over C2C, snoop, dirty snoop data, back-invalidation, write-back, atomic, E and S grants, credit stall, CRC error and replay. |

The full-size top test runs its 800 random operations, plus a burst of
evictions, in about a minute of simulation time on a workstation.
