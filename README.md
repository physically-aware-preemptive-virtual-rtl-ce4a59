# Preemptive virtual channels for a wide AXI4 mesh network-on-chip

## The problem

In a tiled many-core chip whose network carries AXI4 traffic, read and
write data can deadlock each other even when the routing algorithm is
deadlock-free. Consider a DMA engine in one tile. It reads a burst from a
remote memory and writes each returning read beat straight into its own
tile's L1 scratch-pad. Now suppose an external initiator starts a write
burst to that same scratch-pad and its write data takes the link into the
tile. The DMA's read data can no longer arrive. The DMA cannot finish its
own write, so the scratch-pad does not drain the foreign write either.
Each side waits for the other.

The cure is to keep AXI4 read data and write data from ever blocking one
another on a shared link. There are two classic ways to do that:

* **Two physical planes.** Give read data and write data separate links.
  On a network whose data links are 512 bits wide, this doubles the most
  expensive wires crossing every tile boundary.
* **Virtual channels (VCs).** Keep one set of data wires, but give each
  traffic class its own buffers and its own flow control. The usual
  problem is the flow control. A sender may only drive a VC's flit when
  that VC's receiver can take it. If the sender gates `valid` with the
  receiver's `ready` in the same cycle, the timing path runs from the
  receiving router, across the tile to the sender, and back again. That is
  two tile widths of wire in one clock cycle. Credit-based flow control
  removes that path, but it needs a third buffer slot per VC to keep the
  link busy, and that costs area.

This RTL implements a third option, **preemptive VCs**. It keeps the
single set of wide data wires and the two-entry buffers of a plain router,
and it removes the long `ready`-to-`valid` path.

## The preemptive link

Each mesh link of the wide plane has:

* one shared flit bus (`data`: 512-bit payload plus a 17-bit header),
* one `valid` wire per VC,
* one `ready` wire per VC.

VC 0 carries AXI4 write data (W beats). VC 1 carries read data (R beats).
A flit never changes VC, so each class has its own input buffer, switch
and output buffer in every router. The flit on the bus belongs to the one
VC whose `valid` is high. It moves when that VC's `ready` is also high,
which is the ordinary valid/ready rule applied per VC.

The sender side (`pvc_preempt_tx`) works as follows:

1. Each VC has an output buffer. A round-robin arbiter picks one VC that
   has a flit, and that VC owns the link for the cycle. Only its `valid`
   is raised ("mask valid"), and a multiplexer puts its flit on the bus.
2. The `ready` wires coming back only go into a register (`ready_q`).
   The arbiter prefers VCs whose `ready_q` is high. If no such VC has a
   flit, it takes any VC that has one.
3. `valid` is therefore raised speculatively. If the receiver of the
   chosen VC turns out to be full, nothing is lost: the flit stays in the
   output buffer. In the next cycle that VC's `ready_q` is low, so another
   VC with a flit and a ready receiver takes the link. The stalled VC has
   been preempted.

`ready` still pops the local output buffer in the cycle it arrives, as it
must on any valid/ready link. That path crosses the tile once, as in a
link with no VCs. What disappears is the round trip through the sender's
`valid` logic.

A cycle-level example follows. VC 0's receiver is full; VC 1 is streaming.

| cycle | owner | valid[0] | valid[1] | ready[0] | ready[1] | moved |
|------:|:-----:|:--------:|:--------:|:--------:|:--------:|:-----:|
| t     | VC 0  | 1        | 0        | 0        | 1        | none: VC 0 attempt fails |
| t+1   | VC 1  | 0        | 1        | 0        | 1        | VC 1 flit |
| t+2   | VC 1  | 0        | 1        | 0        | 1        | VC 1 flit |

Each blocked attempt costs at most one link cycle. Other cases:

* A single VC whose receiver keeps up uses the link every cycle.
* Two such VCs alternate cycle by cycle, and the link stays fully busy.
* Two-entry receive buffers are enough for full rate. The buffer's
  `ready` is "not full", taken from a register. With one flit drained per
  cycle, occupancy stays at one and `ready` never drops.

## Router

`pvc_router` is a five-port router. Its ports are North, East, South,
West and Eject (the local port towards the tile's network interface), in
the order of `pvc_pkg::route_dir_e`. Per port and per VC, a flit goes
through these stages:

```
link --> pvc_vc_rx --> input buffer[vc] --> XY route --> pvc_switch[vc]
     --> output buffer[vc] --> pvc_preempt_tx --> link
```

* `pvc_vc_rx` writes the bus into the buffer of the VC whose `valid` is
  high. Its `ready` per VC is that buffer's "not full".
* `pvc_xy_route` routes along X until the column matches, then along Y,
  then to Eject. x grows towards East and y towards North.
* `pvc_switch` is a 5 x 5 crossbar for one VC, with one round-robin
  arbiter per output. After a flit whose `last` bit is clear goes through,
  the output stays locked to that input until the burst's last flit has
  passed. Beats of two bursts therefore never interleave on one VC. The
  switch is replicated per VC rather than shared.
* A flit taken into an input buffer at clock edge t passes the switch into
  an output buffer at edge t+1. It is offered on the outgoing link in the
  cycle after that and is taken at edge t+2 if nothing blocks. One hop
  (router plus link) therefore costs two cycles. Throughput is one flit
  per cycle per link.

With `NumVc = 1`, the same module is a plain valid/ready router. The
narrow planes use it that way.

## Tile and mesh

`pvc_tile` holds a tile's three routers. The request/response split of
the narrow planes comes from the baseline network:

| plane | carries | VCs | payload |
|-------|---------|-----|---------|
| wide | AXI4 wide W (VC 0) and wide R (VC 1) data beats | 2 | 512 bits |
| narrow request | AW and AR of both AXI networks, narrow W | 1 | 64 bits |
| narrow response | B of both AXI networks, narrow R | 1 | 64 bits |

`pvc_mesh` is the top level, a `NumX` x `NumY` array of tiles, 4 x 4 by
default.

* Tile (x, y) has index `y*NumX + x`.
* East/West and North/South ports of neighbouring tiles are connected
  directly.
* Ports on the mesh edge are tied off.
* Every router's Eject port appears on the top as `ni_wide_*`, `ni_req_*`
  and `ni_rsp_*`, indexed by tile. This is where a network interface
  (AXI4 to flits) and the tile's compute cluster would attach. Neither is
  part of this RTL.

A flit is `{payload, hdr_t}`, with the header in the low 17 bits:

| bits | field |
|------|-------|
| 16:9 | source (x, y), 4 bits each |
| 8:1  | destination (x, y), 4 bits each |
| 0    | `last`: end of an AXI4 burst, releases switch locks |

A real network interface would put AXI IDs and similar fields into the
payload. The network does not look at them.

## Where this follows the paper and where it does not

Taken from the paper:

* The preemptive link: per-VC valid and ready, shared data wires,
  round-robin ownership among VCs with a flit, registered downstream
  ready deciding next-cycle ownership, speculative valid, preemption of a
  stalled VC.
* Static binding of write and read data to two VCs.
* Per-VC input buffers behind a shared link.
* Replicated switches.
* 512-bit wide links and 64-bit narrow links.
* Deterministic XY routing.
* The 4 x 4 mesh.
* The three-plane organisation of each tile.

This design's own choices, where the paper gives no detail:

* Buffer depth 2, both input and output. The paper only states that no
  buffering beyond the baseline router's is needed.
* Not-fall-through buffers, so a hop takes two cycles.
* The flit header layout, the coordinate width and the edge tie-offs.
* Round-robin rotation after every flit. Two ready VCs alternate rather
  than one keeping the link.
* When no VC with a flit has a ready receiver, the arbiter still picks
  one of them.
* The registered ready resets to 1.
* Wormhole locking on a `last` flag.
* Asynchronous active-low reset.
* Which VC carries reads and which carries writes.

Not included:

* The network interface (AXI4 to flit conversion).
* The compute cluster with its DMA, AXI crossbar and L1 memory.
* The comparison designs, namely two physical planes, gating valid with
  ready, and credit-based flow control. They are alternatives to this
  design, not parts of it.
* No area, frequency or wiring figure comes from this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by
printing `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_pvc_fifo` | queue model under random push/pop, not-full ready, one-cycle latency |
| `tb_pvc_rr_arbiter` | every grant against a reference pointer model |
| `tb_pvc_xy_route` | all 256 (tile, destination) pairs of a 4 x 4 mesh |
| `tb_pvc_switch` | output port, per-input order, no burst interleaving, completeness, same-cycle traversal, under random bursts and backpressure |
| `tb_pvc_preempt_tx` | no combinational `ready`-to-`valid` dependency (toggles `ready` mid-cycle); one flit per cycle for one VC and for two VCs together; a stalled VC is preempted and the other keeps ≥ 98 % of the link; random traffic |
| `tb_pvc_vc_rx` | flits sorted by VC, a full VC drops only its own ready |
| `tb_pvc_router` | XY port, VC kept, order, no interleaving, two-cycle hop, full-rate streaming, read data at full rate through a link whose write VC is blocked |
| `tb_pvc_tile` | all three planes at full width at once; a stalled response plane does not slow the wide plane |
| `tb_pvc_mesh` | whole 4 x 4 mesh with the wide payload cut to 32 bits (faster build), see below |
| `tb_pvc_mesh_full` | the same test with every parameter at its default |

The mesh tests put an endpoint model at every tile's local ports and run
three phases:

1. **Broadcast.** A binary-tree broadcast from tile 0 to all 16 tiles (4
   rounds), for 1 to 32 KiB, as 64-byte beats in bursts of at most 256.
   It runs once as writes (VC 0) and once as reads (VC 1).
2. **Deadlock scenario.** Tile 0 refuses write data while writes from
   tile 3 and read data from tile 2 share the same links.
3. **Random traffic** on all planes with random ejection backpressure.

They also count link preemptions, stalled-VC cycles, VC changes on a
link, cycles with a switch burst lock held, and narrow-plane flits. Each
count must be non-zero.

Results at the default sizes:

* Each broadcast round completes in its beat count plus 5 cycles. The
  whole 32 KiB broadcast takes 2068 cycles, and smaller sizes scale
  accordingly (84 cycles for 1 KiB).
* In the deadlock scenario, tile 0 receives 100 read beats in 100 cycles
  while its write data is held.

These cycle counts cover the network alone. They include no DMA setup
and no synchronisation.

Running a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --top-module tb_pvc_router \
    rtl/pvc_pkg.sv rtl/*.sv tb/tb_pvc_router.sv
./obj_dir/Vtb_pvc_router
```

The two mesh testbenches build slowly because every router is flattened
into C++. `tb_pvc_mesh` takes about 4 minutes and `tb_pvc_mesh_full`
about 8 minutes on one core, longer on a loaded machine. Either then
simulates in about a second. Both have been run to a pass, the full-size
one with 512-bit wide links and the 4 x 4 mesh.

## Changing the design

* Mesh size: `NumX`, `NumY` on `pvc_mesh`. The coordinate fields hold up
  to 16 x 16 (`pvc_pkg::CoordW`).
* Link widths: `WideW` and `NarrowW` on `pvc_mesh` and `pvc_tile`.
* Buffer depths: `InDepth` and `OutDepth` on `pvc_router`.
* Number of VCs: `NumVc` on `pvc_router`. `pvc_preempt_tx` and
  `pvc_vc_rx` work for any count. The tile builds the wide plane with
  `pvc_pkg::NumWideVcs = 2`.

Assertions in the RTL check two rules: at most one `valid` per link per
cycle, and a buffered flit stays stable while it waits.
