# FlooNoC narrow-wide network: RTL

This is a network-on-chip that carries AXI4 traffic between compute tiles. It is aimed at
systems where two very different kinds of traffic meet:

- cores issue single 64-bit loads and stores whose latency matters;
- DMA engines move 512-bit bursts that need sustained bandwidth.

It rests on three ideas:

1. **Wide flits with the header on wires of its own.** Every flit is a complete AXI beat plus
   a header, and it crosses a link in one cycle. No header or tail flits are serialised in
   front of the data, so a 512-bit burst runs at one beat per cycle.
2. **Separate physical links for separate traffic.** A narrow request link, a narrow response
   link and a wide link run side by side. They use separate routers instead of virtual
   channels, so bursts on the wide link never delay core traffic.
3. **AXI ordering at the endpoints.** The routers are plain wormhole routers and give no
   ordering guarantee. The network interface (NI) of the issuing tile restores AXI's
   per-ID response order with a reorder table and a reorder buffer (ROB). Space in the ROB is
   reserved before a request enters the network.

The RTL covers the network part of one compute tile: the NI and a three-link 5x5 router. The
processor cluster that the tile would hold is not included. Its AXI ports are the tile's
ports.

## Files

| File | Content |
|---|---|
| `rtl/floo_pkg.sv` | widths, header, flit and AXI types; XY routing and address-to-tile functions |
| `rtl/floo_fifo.sv` | valid/ready FIFO (router buffers, NI register slice, small queues) |
| `rtl/floo_rr_arb.sv` | round-robin arbiter, optionally locked until a tail flit |
| `rtl/floo_router.sv` | one 5x5 wormhole router for one link type |
| `rtl/floo_multilink_router.sv` | three routers: narrow_req, narrow_rsp, wide |
| `rtl/floo_rob.sv` | reorder table + ROB for one AXI response channel |
| `rtl/floo_meta_buffer.sv` | target-side record of return information, atomic ID slots |
| `rtl/floo_nw_chimney.sv` | the narrow-wide AXI network interface |
| `rtl/floo_compute_tile.sv` | top: NI + multilink router of one tile, links in four directions |
| `tb/tb_*.sv` | one self-checking testbench per block, plus AXI master/memory models |

## Links and flits

Each direction between two neighbouring tiles has three links. Each link is a `valid`/`ready`
pair plus one flit of the width below.

| Link | Flit bits | Carries (narrow 64-bit bus) | Carries (wide 512-bit bus) |
|---|---|---|---|
| `narrow_req` | 119 | AW, AR, W | AW, AR |
| `narrow_rsp` | 103 | R, B | B |
| `wide` | 605 | – | W, R |

Wide AR, AW and B messages are small, so they ride on the narrow links. That keeps the wide
link for data beats.

**Header.** Every flit starts with the same 27-bit header (`floo_pkg::hdr_t`):

| Field | Bits | Meaning |
|---|---|---|
| `dst_id` | 6 | destination tile, `{y[2:0], x[2:0]}` |
| `src_id` | 6 | issuing tile; responses are routed back to it |
| `last` | 1 | tail of a wormhole packet |
| `rob_req` | 1 | the response must go through the ROB |
| `rob_idx` | 8 | ROB slot, or the AXI ID when `rob_req` is 0 |
| `atop` | 1 | the flit belongs to an atomic transaction |
| `axi_ch` | 4 | which AXI channel the payload is (encoding in `axi_ch_e`) |

**Payload.** The payload is the AXI channel struct itself. It holds the 48-bit address, the
data, the strobes and so on. The AXI ID and user widths are chosen so that the narrow links
come out at 119 and 103 bits:

- narrow bus: ID 4 bits, user 5 bits;
- wide bus: ID 3 bits, user 1 bit.

The wide link is 605 bits: a 512-bit data, 64-bit strobe, last and user W beat (578 bits)
plus the 27-bit header. The published description gives 603 bits for this link and 25 bits
for the header, but its own field widths add up to 27. The field widths were kept, which is
where the 2 extra bits come from.

**Destination.** The destination tile comes from the address. Bits [22:20] give x and bits
[25:23] give y, so each tile owns a 1 MiB window. Change `AddrXOffset` to move the window.

## Router

`floo_router` has `NumPorts` inputs and outputs, with port order N, E, S, W, local (0..4).
The flit type is a parameter, so one module serves all three links. For each flit:

1. The flit enters a 2-entry input FIFO.
2. The head of each FIFO is routed XY: first along x (East is x+1), then along y (North is
   y+1), and ejected locally when both match. With `RouteAlgo = IdTable`, the
   output port is instead read from the static parameter `RouteTable`, 3 bits per destination
   id, and the switch is left complete.
3. Each output has a round-robin arbiter. Once it grants a flit without the tail bit, it
   stays with that input until the tail flit has passed. This is wormhole switching: packets
   never interleave on a link.
4. With `EnOutputBuffer` set (the default), each output has a 2-entry elastic buffer.

**Latency.** A flit needs 2 cycles per hop at zero load: one in the input FIFO and one in
the output buffer. This is the two-cycle configuration chosen to give long inter-tile wires
a full cycle. Turning off `EnOutputBuffer` gives a one-cycle router.

**Switch pruning.** With `XyOpt`, the switch omits connections that XY routing never uses:

- an output back to the port a flit came in on;
- a turn from the y dimension into x;
- local to local.

An assertion fires if a flit ever asks for a pruned connection. In particular, a master must
not address its own tile through the network.

`floo_multilink_router` places three such routers side by side. They share nothing but the
tile id. A stalled wide link therefore cannot hold up narrow requests or responses, and the
multilink testbench checks exactly that.

## Network interface

`floo_nw_chimney` sits between the tile's two AXI buses and the three links. Each bus has two
sides:

- **initiator side:** a master in the tile sends requests into the network;
- **target side:** a slave in the tile serves requests that arrive from the network.

### Initiator side: injecting requests

A round-robin arbiter picks among narrow AW, narrow AR, wide AW and wide AR. The winner becomes
a flit on `narrow_req`. A 2-entry register slice on this output is the NI's one cycle of
latency.

**Narrow writes.** After a narrow AW, the encoder stays on the narrow W channel until W
`last`. The AW flit has `last=0` and the final W beat carries the tail. AW and W thus travel
as one wormhole packet, and W beats need no matching at the target.

**Wide writes.** A wide AW goes on `narrow_req`. Its W beats go on the wide link to the same
destination; a small FIFO (`WideWDstDepth`) remembers the destinations in AW order. On the
wide link the NI arbitrates between its own W bursts and the R data it returns as a target,
holding each burst to the end.

### Initiator side: reorder table and ROB

This is the heart of the design. AXI requires that responses with the same ID return in
request order. Responses to requests sent to different tiles can arrive in any order.
`floo_rob` restores the order. There is one instance per response channel: narrow R, narrow
B, wide R and wide B.

**The reorder table** holds one FIFO per AXI ID (`TableDepth` entries each). Every
outstanding request of that ID has one entry. The entry holds:

- whether the response is buffered;
- if so, where in the ROB it goes;
- the request's destination.

**Deciding whether a request needs the ROB.** When a request arrives, the table decides
before it is sent:

- **No reordering** if the ID has nothing outstanding. The first response of a stream is
  always in order.
- **No reordering** if every outstanding request of the ID is also unbuffered and went to the
  same destination. XY routing is deterministic, so responses from one tile come back in the
  order of the requests.
- **ROB slot needed** in every other case. The request needs `len+1` contiguous ROB entries,
  one per response beat. The ROB is a circular buffer: slots are handed out at the allocation
  pointer and reclaimed in allocation order. If there is not enough free space, or the ID's
  table FIFO is full, the request is held back (AXI `ready` low). This is the end-to-end flow
  control: a response that needs the ROB always finds its space, so the network never has to
  hold a response because an endpoint is full.

**Header fields on the request.** `rob_req` tells the target whether reordering is needed.
`rob_idx` carries the ROB slot, or, when no reordering is needed, the AXI ID. The target
sends both back unchanged with the response.

**What happens to each response:**

- **Not buffered:** it is, by construction, the oldest outstanding response of its ID. It
  goes straight to the AXI master in the same cycle, and the ID is taken from `rob_idx`.
- **Buffered:** its beats are written at `rob_idx`, `rob_idx+1`, ... Readout then walks each
  ID's table FIFO in order. A buffered response leaves once it is complete and all older
  responses of its ID are gone. Different IDs are served round-robin.

An output multiplexer merges the direct path and the ROB readout without splitting a burst.

**Sizing.** ROB entries are one beat each:

- narrow R ROB: 256 entries = 2 KiB of 64-bit beats;
- wide R ROB: 128 entries = 8 KiB of 512-bit beats, enough for two outstanding 4 KiB
  bursts;
- B reorder units: 32 entries each (B responses are small).

All storage is written as flip-flop arrays. A physical implementation would map the two read
ROBs to SRAM.

### Target side

Requests are decoded by `axi_ch`:

- narrow AW, narrow W and narrow AR go to the narrow slave port;
- wide AR goes to the wide slave port;
- a wide AW waits in a buffer (`WideAwBufDepth`) until its W burst shows up on the wide link.
  The W burst's `src_id` selects the oldest buffered AW from that source. The AW is issued
  together with the first W beat, so AW and W order agree on the slave's bus even when bursts
  from several sources interleave in arrival.

**Return information.** `floo_meta_buffer` keeps what is needed to send a response back:
source tile, `rob_req`, `rob_idx` and the initiator's AXI ID. There is one buffer for the
narrow bus and one for the wide bus.

- Non-atomic requests go to the slave with AXI ID 0. A slave answers same-ID requests in
  order, so a plain FIFO (`MetaDepth`) of return records suffices for R and for B.
- Atomic transactions (AXI ATOPs) need IDs of their own. They get IDs 1..`NumAtomics` from
  a small pool of slots. A slot is freed when its B response, and its R data if the atomic
  returns data, have been sent.

**Responses.** Responses from the slave are turned back into flits with the stored header
information:

- narrow R, narrow B and wide B share `narrow_rsp` through a packet-locked arbiter;
- wide R goes on the wide link.

R data of an atomic is marked `atop=1, rob_req=0` and carries its AXI ID in the payload. At
the initiator it bypasses the R reorder unit, since an atomic's R data and B response belong
to one transaction. Atomics with R data on the wide bus are not supported; an assertion
checks this.

### Deadlock rule for wide traffic

Wide W (a request) and wide R (a response) share the wide link. This is exactly what the
channel mapping asks for. It creates one dependency that the narrow traffic does not have. A
deadlock can form like this:

1. A wide AR (or AW) reaches a target whose wide record FIFO (or AW buffer) is full, and it
   blocks `narrow_req` there.
2. The AW that a wide W burst is waiting for is stuck behind it.
3. The W burst then occupies the wide link.
4. Wide R data can no longer leave, so the target never frees its records.

The system avoids this by keeping the wide transactions in flight towards any one target
within the target's buffers:

- at most `MetaDepth` (32) wide reads plus writes;
- at most `WideAwBufDepth` (8) wide writes.

Traffic with no wide writes in flight is unrestricted, because R data always drains into
reserved ROB space. The end-to-end testbench keeps each wide master to two outstanding
transactions during mixed traffic (3 masters x 2 < 8). The published description states only
that requests and responses travel on different links, which its own channel table does not
do for the wide bus.

## Compute tile and mesh

`floo_compute_tile` connects the NI to the local port of `floo_multilink_router`. Its ports
are:

- the four cardinal link bundles, as arrays indexed N, E, S, W;
- the cluster's narrow and wide AXI initiator and target ports, as structs.

To build a mesh, abut the tiles:

- the E outputs of tile (x,y) drive the W inputs of tile (x+1,y), and the other way round;
- the N outputs of (x,y) drive the S inputs of (x,y+1), and the other way round.

Tie the unused boundary inputs to `valid=0`. Tile ids are 3-bit x and 3-bit y coordinates,
so one mesh holds up to 8x8 endpoints. A 7x7 mesh of tiles with memory controllers on all
four sides needs 9 positions per dimension; widen `XWidth`/`YWidth` to 4 for that.

**Latency.** A zero-load read from a tile to its neighbour takes 4 router traversals x 2
cycles + 1 NI cycle = 9 network cycles. The end-to-end testbench measures 10 cycles from the
AR handshake to the first R beat, with its 1-cycle memory model. Pipeline cuts inside a real
cluster come on top of this.

## Parameters

| Parameter | Default | Where | Note |
|---|---|---|---|
| `NarrowDataWidth` / `WideDataWidth` | 64 / 512 | pkg | from the published design |
| `AddrWidth` | 48 | pkg | from the published design |
| `NarrowIdWidth`, `NarrowUserWidth` | 4, 5 | pkg | chosen to give the 119/103-bit links |
| `WideIdWidth`, `WideUserWidth` | 3, 1 | pkg | own choice |
| `XWidth`, `YWidth` | 3, 3 | pkg | 6-bit node id as in the flit diagram |
| `NumPorts` | 5 | router | 5x5 router |
| `InFifoDepth`, `OutFifoDepth` | 2, 2 | router | own choice |
| `EnOutputBuffer` | 1 | router | two-cycle router as implemented on chip |
| `XyOpt` | 1 | router | pruned switch |
| `RouteAlgo`, `RouteTable` | `XyRouting`, `'0` | router, multilink router, tile | table format is own choice |
| `NarrowRobSize` | 256 | NI, tile | 2 KiB |
| `WideRobSize` | 128 | NI, tile | 8 KiB |
| `BRobSize` | 32 | NI | own choice |
| `TableDepth` | 4 | NI | outstanding transactions per ID, own choice |
| `MetaDepth` | 32 | NI | own choice; one initiator's 32 possible wide reads (8 IDs x 4) fit, so the wide reads of one initiator never back up into `narrow_req` |
| `NumAtomics` | 4 | NI | own choice |
| `WideAwBufDepth`, `WideWDstDepth` | 8, 4 | NI | own choice |

## Departures and limits

- **Header and wide-link widths.** The header is 27 bits and the wide link 605 bits. The
  published totals are 25 and 603, but the published field widths add up to 27. A duplex
  channel is 2 x (119 + 103 + 605) = 1654 wires, against "approximately 1600".
- **Routing.** The tile uses XY routing. Table-based routing (`RouteAlgo = IdTable`) is available on `floo_router`, `floo_multilink_router` and `floo_compute_tile`; one table serves all three links of a tile, and only the router testbench exercises it. The XY function serves exactly five ports; other port counts need a table.
- **Flip-flop storage.** ROB, reorder table and meta storage are flip-flop arrays, not SRAM
  or latch-based memories.
- **Design choices not taken from the published description:**
  - the AW+W wormhole packet on `narrow_req`;
  - the wide AW/W matching at the target;
  - the atomic R bypass;
  - all FIFO and table depths;
  - the channel encoding and the address-to-tile mapping.
- **Wide-link deadlock rule.** See "Deadlock rule for wide traffic" above.
- **Not included:** the cluster (RISC-V cores, FPUs, DMA, scratchpad, instruction cache,
  internal crossbars), the memory controllers, and physical-design elements (SRAM macros,
  buffer islands).

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it does |
|---|---|
| `tb_floo_router` | Checks the 2-cycle zero-load hop latency. Sends random multi-flit packets from all five inputs under random output backpressure. An independent XY model checks the port, per-pair order and that packets never interleave. A second, table-routed router with a YX table must send each flit to the port its table names. |
| `tb_floo_multilink_router` | Sends random traffic on all three links. Then all wide outputs are blocked for 200 cycles; narrow flits must keep flowing, and the wide flits must all arrive afterwards. |
| `tb_floo_rob` | Drives random requests and responses through a network model with random per-destination latency. Checks the direct/buffered decision against a model, the output order and data, and that stalls for ROB space occur. |
| `tb_floo_meta_buffer` | Checks FIFO order of return records and atomic ID allocation. Checks that a fifth concurrent atomic is held back, and that a slot stays busy until both B and R have returned. |
| `tb_floo_nw_chimney` | One NI looped back onto itself. Runs random narrow/wide reads, writes, bursts and atomics against memory models. Checks data and per-ID order. |
| `tb_floo_workload_lat_bw` | Two adjacent default tiles run directed sweeps. (1) 100 narrow reads beside 0 to 64 wide 16-beat bursts: mean narrow latency stays at 10 cycles. (2) 16 wide bursts beside 0 to 64 narrow reads: 256 beats arrive in 266 cycles (96%). Each sweep runs one-way and both ways. |
| `tb_floo_compute_tile` | Four default-parameter tiles in a 2x2 mesh, each with narrow and wide masters and memories. See below. |

`tb_floo_compute_tile` runs in three phases:

1. A zero-load neighbour read; the latency must be 10 cycles.
2. Back-to-back wide reads that fill a wide ROB.
3. Random mixed traffic with atomics, with random memory delays.

The test counts ROB allocations, direct responses, stalls for ROB space, multi-flit wormhole
packets, router backpressure, atomics, wide W bursts waiting for their AW, and narrow and wide
flits crossing one router in the same cycle. It fails if any of these never happens.

To simulate with Verilator (5.x), from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/floo_pkg.sv tb/tb_floo_util_pkg.sv tb/tb_floo_compute_tile.sv \
  --top-module tb_floo_compute_tile -Mdir obj -o sim
./obj/sim
```

Replace the testbench name to run another one. The simulator is two-state, so all state that
is read is reset. The AXI models in `tb/` (`tb_axi_master`, `tb_axi_mem`) are behavioural and
only for simulation.
