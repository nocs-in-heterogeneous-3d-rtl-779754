# A 3D network-on-chip for stacks that mix slow and fast dies

A 3D system-on-chip may stack a mixed-signal die (sensor read-out, ADCs,
analog accelerators) on top of digital dies made in a much newer process.
Routers on the mixed-signal die run at a lower clock and sit further apart.
There, a packet moves fewer hops per nanosecond, and fewer flits per
nanosecond, than in the digital layers. In a plain XYZ mesh every packet
that touches the slow layer is held back by it. This happens twice:

* **Latency.** A packet crossing the slow layer horizontally pays the slow
  clock on every hop.
* **Throughput.** A link into or out of the slow layer carries only one flit
  per slow cycle. A 32-flit packet from a digital core to the mixed-signal
  die therefore takes `c_f` times longer to drain than inside the digital die.
  Here `c_f` is the clock ratio between the layers.

This RTL implements both remedies, which are designed to work together.

1. **Routing that avoids the slow layer.** Packets leave the slow layer
   as early as possible and enter it as late as possible. A long trip
   between two slow-layer nodes may even make a detour through the fast
   layer below.
2. **A high vertical-throughput (HVT) router in the slow layer plus wide
   vertical links.** The slow router moves `c_f` flits per slow cycle on
   exactly the ports that routing 1 makes busy: local, down and up. The
   vertical links convert between one flit per fast cycle and `c_f` flits
   per slow cycle. Seen from the digital side, the slow layer then keeps
   up with the fast flit rate.

The default network is 4 × 3 × 3 routers.

* Layer 0 is the mixed-signal layer, clocked at half the rate of the others
  (`CF = 2`, e.g. 0.5 GHz against 1 GHz).
* Layers 1 and 2 are digital.
* Flits are 32 bits. Input buffers hold 8 flits. Flow control uses credits
  and switching is wormhole.
* Packets in the tests are 32 flits long, with one head flit.

## Coordinates and ports

* A router's address is `(x, y, z)`. The origin is the top-left router of
  the top layer.
* x grows to the east and y grows to the south.
* z grows downwards, from the slow layer 0 into the digital layers.
* Each router has seven ports, numbered as in `noc_pkg::port_e`:
  `LOCAL, NORTH, EAST, SOUTH, WEST, UP, DOWN`.
* "Up" means towards z − 1, i.e. towards the slower layer.
* The top-level arrays index nodes by `n = (z·Y + y)·X + x`.

## Routing

`route_compute` is purely combinational. Given the current address `v`,
the destination `d` and the layer's threshold `Φ`, it returns an output
port. It checks these cases in order; the first match wins.

| case | Z+(XY)Z- (`ALG_ZPXYZM`) | ZXYZ (`ALG_ZXYZ`) |
|---|---|---|
| `v = d` | local | local |
| `v_z < d_z` (destination is in a faster layer) | down | down |
| `v_z ≥ d_z`, `|v_x−d_x| + |v_y−d_y| > Φ`, and a layer below exists | — | **down (detour)** |
| `v_x ≠ d_x` | east / west | east / west |
| `v_y ≠ d_y` | south / north | south / north |
| otherwise (`v_z > d_z`) | up | up |

`ALG_XYZ` is the conventional baseline. It routes X, then Y, then down or
up, and ignores `Φ`.

How the routing plays out:

* **Z+(XY)Z-.** A packet drops to its destination's layer or lower first,
  then travels XY, then climbs. So a packet from the slow layer to a
  digital node makes its horizontal hops in the fast layer. A packet from
  a digital node to the slow layer does its XY part in the digital layer,
  then climbs once.
* **ZXYZ.** This adds one rule. If the horizontal distance left is larger
  than `Φ`, the packet goes down even though the destination is at or
  above its layer. It then does the XY part in the fast layer and climbs
  back. The detour costs two vertical hops but saves slow horizontal hops.
  It pays off only beyond a break-even distance.
* **Φ in the top.** The top sets `Φ = PHI_SLOW = 4` in layer 0 and
  "infinite" (`PHI_INF = 255`) in all other layers. So only the slow layer
  detours.
  * The value 4 comes from the break-even condition with these inputs:
    equal router pitch in both layers, 3-cycle routers, and a clock ratio
    of 2.
  * Write `δ` for the router delay in cycles. The break-even distance is
    then `φ = (3δ + 2)/δ` hops.
  * With `δ = 3`, the detour wins beyond 11/3 hops, which rounds up to 4.
  * With other technologies, or another router delay, recompute `PHI_SLOW`.
* **Turns.** Both algorithms only ever turn from down to horizontal,
  from horizontal to up, and from X to Y. They never go up and then down
  again. This is why they are free of deadlock with one channel per port.
  `tb_route_compute` walks every source/destination pair of the
  4 × 3 × 3 grid and checks that each path ends at the destination within
  the expected number of hops.

## Clocking: one clock, a clock enable for the slow layer

The whole design runs on one clock, the fast clock.

* `ratio_tick` produces `slow_tick`, which is high one cycle in `CF`.
* Every register of the slow layer updates only when `slow_tick` is high.
* The slow routers' outputs are therefore held for `CF` fast cycles.
  Logic in the slow layer may take `CF` fast cycles; it is a multicycle
  path of the enable.
* This is the same timing as a slow clock with the integer ratio `CF`
  whose edges line up with fast edges.
* A real chip would give each die its own clock and make the vertical
  links the crossing point. The links here are written so that the slow
  side is only read and written at `slow_tick`. That is the discipline
  a synchronous ratio crossing needs.

## The HVT router (`router`, `HVT = 1`)

`router` is an input-buffered wormhole router. With `HVT = 0` it is a
conventional router, used in the digital layers. With `HVT = 1` three of
its ports are **wide**: local, up and down, and they carry `CF` lanes.

### Per input port

Each input has an `input_buffer`:

* It is a circular FIFO of `DEPTH` flits.
* A wide port can write up to `CF` flits in one cycle. The lanes used are
  contiguous from lane 0.
* It shows its `CF` oldest flits on `peek`.
* It can drop any number from 0 to `CF` of them (`rd_cnt`).

The head flit's destination feeds `route_compute`. When the packet wins
its output, the input stores the route and keeps it until the tail has
left. This is wormhole switching: the input is "active".

### Per output port

* A round-robin `rr_arbiter` chooses among the inputs that request it.
* While a packet is in flight the output is **locked** to its input. Only
  that input may use it until the tail passes.
* A credit counter holds the free space of the next buffer.

### One cycle of a transfer

An output moves `n` flits of the packet it serves in one cycle:

```
n = min( flits of this packet at the head of the input buffer (stop at the tail),
         credits of the output,
         CF if both the input and the output port are wide, else 1 )
```

The flits pass through the `crossbar`:

* Lane 0 is an ordinary N-bit 7 × 7 crossbar.
* Lanes 1 … CF−1 form a second crossbar that only connects the wide ports
  to one another.
* A transfer from a horizontal port to local or up uses lane 0 only. The
  extra lanes of that output are then zero.

The result goes into the output register (`out_vld`, `out_flit`). In the
same enabled cycle the input returns `n` credits on `in_cred`.

### Timing

A head flit is written into the input buffer in one enabled cycle. In the
next enabled cycle it is routed, arbitrated and switched into the output
register. So every router adds 2 enabled cycles of head latency, and a
body flit streams at one flit (or `CF` flits) per enabled cycle. In the
slow layer an enabled cycle is `CF` fast cycles.

### Where the wide path comes from

A packet between the slow layer and a digital layer uses only the wide
ports in the slow layer:

* local input → down output when leaving the slow layer (Z+ is the first
  hop);
* down input → local output when arriving from below (Z- is the last hop,
  straight into the destination's router).

The routing makes this so, and it holds for ZXYZ detours too. That is why
the wide crossbar can be this small. Only packets that stay inside the slow
layer (at most `Φ` hops) use its horizontal ports, at one flit per slow
cycle.

In the top, the slow layer is the top die, so its up port has no link. It
is still built wide. A router with `HVT = 1` and a live up port would serve
a slow layer in the middle of a stack. The RTL supports it, but no
testbench exercises it.

## Vertical links between the slow layer and the layer below

These sit between each slow router's down port and the up port of the
digital router underneath it.

### `vlink_up`: fast layer to slow layer

* The digital router's up output delivers one flit per fast cycle.
* The link shifts these flits into a register of `GROUPS·CF` flits.
* At each `slow_tick` the oldest `m = min(held, CF, credits)` flits cross
  in parallel. They use a `CF·N`-bit bundle of vertical wires and are
  written into the slow router's wide down buffer in the same cycle.
* Credits work as follows:
  * The link returns one credit to the fast router for each flit that
    leaves.
  * The fast router starts with `GROUPS·CF` credits.
  * The link itself holds credits for the slow router's buffer.

### `vlink_down`: slow layer to fast layer

* At each `slow_tick` up to `CF` flits arrive in parallel from the slow
  router's down output.
* The link stores them in a register of `GROUPS·CF` flits.
* It hands one flit per fast cycle (registered) to the digital router's up
  input, as long as it has credits for that buffer.
* Credits for freed slots are added up in the fast layer. They are
  returned to the slow router on the next `slow_tick`.

### Sizing and measured rates

Why `GROUPS = 3` and not 1 (a bare `CF`-flit shift register):

* The slow side sees credits only at its edges.
* A group of `CF` flits can only be accepted when the previous group has
  drained and its credits have come back.
* The extra groups are slack that covers this round trip. That way the
  fast side can keep sending one flit per fast cycle.
* Three groups is a choice made by reasoning, not a measured minimum.
  Smaller values were not characterised.
* At the default of three groups, the testbenches measure the rate:
  * `vlink_up` moves 200 flits in 202 fast cycles;
  * `vlink_down` moves 200 flits in 204 fast cycles.

Between the two digital layers the vertical links are plain router-to-router
links.

The routers on both sides of a link start with `GROUPS·CF` credits towards
it: the fast router on its up port, the slow router on its down port.
`noc3d` sets this with the routers' `OUT_CRED` parameter.

## Top level (`noc3d`)

### Parameters (defaults)

| parameter | default | meaning |
|---|---|---|
| `X`, `Y`, `Z` | 4, 3, 3 | routers per row, rows, layers |
| `CF` | 2 | clock ratio of the slow layer 0 |
| `DEPTH` | 8 | router input buffer depth (flits) |
| `PE_DEPTH` | 8 | ejection buffer of each processing element (credits of local outputs) |
| `GROUPS` | 3 | vertical link register size in groups of `CF` flits |
| `ALGO` | `ALG_ZXYZ` | routing algorithm for every router (`ALG_ZPXYZM`, `ALG_ZXYZ` or the baseline `ALG_XYZ`) |
| `PHI_SLOW` | 4 | ZXYZ threshold of layer 0 |

Credit counts travel in 4-bit fields (`noc_pkg::CRED_W`). So `DEPTH`,
`PE_DEPTH` and `GROUPS·CF` must each stay at or below 15. Going deeper
means widening `CRED_W`. Coordinates are 4 bits each, so `X`, `Y` and `Z`
can be at most 16.

### Ports

Each has one entry per node. Lane arrays are `[NN][CF]`.

* `inj_vld`, `inj_flit`: injection.
  * Slow-layer nodes may use `CF` lanes per slow cycle.
  * Digital nodes use lane 0.
  * Inputs of slow nodes are sampled only when `slow_tick` is high.
* `inj_cred`: injection credits, one per freed buffer slot. A slow node's
  credits are valid in its `slow_tick` cycle.
* `ej_vld`, `ej_flit`: ejection, registered. Slow nodes may eject two flits
  at once.
* `ej_cred`: the processing element's credits back to the router.
* `slow_tick`: the slow layer's clock enable, for the processing elements
  of layer 0.

Edges of the mesh have no links: those ports start with zero credits.

### Flit format

A flit (`flit_t`) has `head` and `tail` bits and 32 data bits. In a head
flit the data is a `head_t`:

* destination x, y, z (4 bits each);
* source x, y, z (4 bits each);
* an 8-bit tag.

A one-flit packet has both `head` and `tail` set. The bit layout is this
design's choice.

### Size after coarse synthesis

With the defaults, coarse synthesis (yosys) gives about 100 k word-level
cells, 19.4 k flip-flop bits and 50.6 k memory bits. The memory bits are
the input buffers: 36 routers × 7 ports × 8 flits × 34 bits = 68.5 k bits,
less the buffers on edge ports that synthesis removes.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_route_compute` | Both algorithms against a reference model for every (current, destination) pair of the 4 × 3 × 3 grid, with Φ = 4 in layer 0 and ∞ below. Every path is walked to its end. The detour is taken exactly when the distance exceeds Φ. |
| `tb_input_buffer` | Random 0…CF-flit writes and reads against a queue model, with wrap-around. Sustained CF flits per cycle in and out. |
| `tb_rr_arbiter` | The grant is one-hot and requested. Round-robin fairness under full load: each requester gets an equal share. |
| `tb_crossbar` | Random selections. Lane 0 is switched everywhere. Extra lanes pass only wide → wide and are zero otherwise. |
| `tb_router` | An HVT router of the top layer at half rate and a conventional router, with random packets on every linked port and random back-pressure. Each packet must leave on the port the routing picks, whole, contiguous and in order. Head latency is 2 enabled cycles. The HVT router makes two-flit transfers and the conventional one never does. |
| `tb_vlink_up`, `tb_vlink_down` | Order and integrity across the rate change. Throughput at the fast rate (see above). Credits never overrun. |
| `tb_noc3d` | The whole default network: zero-load latencies, then uniform random traffic from all 36 nodes (see below). |

### The end-to-end test

`tb_noc3d` runs the default network with no parameter overrides.

Phase 1 (zero load) checks:

* a head latency of exactly 2 cycles per router in a digital layer;
* a 32-flit packet from the slow layer to the digital layer, and the
  other way, drains at the fast rate (31–35 fast cycles from head to tail);
* a 5-hop packet inside the slow layer takes the detour through layer 1.

Phase 2 (random traffic):

* 185 packets of 32 flits from all 36 nodes, with random credit return
  at the ejection ports.
* Every flit is checked for destination, source, order and position of
  the tail.

It counts each mechanism and fails if any count is zero. A typical run
shows:

* 2 detours;
* 43 first hops down from the slow layer;
* 82 last hops up into it;
* about 600 two-flit transfers on each of: the down links, the up links,
  slow-layer injection and slow-layer ejection;
* 19 single-flit ejections in the slow layer;
* about 7 400 credit stalls.

Simulation takes well under a second once built.

### Running with verilator

```
verilator --binary --timing --assert --top-module tb_noc3d -Irtl -Itb \
          rtl/noc_pkg.sv tb/tb_noc3d.sv -y rtl -y tb
./obj_dir/Vtb_noc3d +verilator+rand+reset+2
```

Replace `tb_noc3d` by any other testbench name. `tb_router` uses the helper
module `tb_router_harness`, which `-y tb` finds.

Known lint warnings:

* `SYNCASYNCNET`: `rst_n` is used both as an asynchronous reset and in
  the `disable iff` of the assertions.
* `WIDTHCONCAT`: the whole-array `'0` defaults in `noc3d`.
* Unused package fields.

None of them affects the circuit.

## How this design departs from the published architecture

* **One virtual channel.** The published evaluation uses four virtual
  channels in the digital layers. Here every port has a single channel.
  * The routing is deadlock-free without channels.
  * Without channels, a packet blocked at an output also blocks the packets
    behind it.
* **Router pipeline.** Routers here take 2 cycles per hop for the head
  flit. The latency model it was derived from assumes 3. `PHI_SLOW = 4`
  is the value for 3-cycle routers. With 2-cycle routers the formula above
  gives exactly 4 hops, so `Φ = 4` either way.
* **Vertical link registers.** These hold `3·CF` flits rather than `CF`,
  for the credit round trip (see above).
* **Clocking.** One clock with an enable, instead of separate per-die
  clocks.
* **Wide up port.** It is built in every slow router even when the slow
  layer is on top. The published design notes that only the local and
  down buffers then need to be wide.
* **Equal grids.** Every layer has the same `X × Y` grid. A digital layer
  with more, denser routers than the slow layer, joined by a
  non-one-to-one vertical mapping, is not expressible.
* **XYZ baseline.** `ALGO = ALG_XYZ` selects plain dimension-order
  routing (X, then Y, then Z, with no threshold). It is there for
  comparisons.
  * The end-to-end traffic of `tb_noc3d`, rerun on a copy with
    `ALG_XYZ`, delivers every packet intact. Only the two detour checks
    fail, as they must.
  * That run shows why the router and the routing belong together. Under
    XYZ, a packet leaving the slow layer first travels horizontally in it
    and then turns down from a narrow port.
  * As a result, two-flit transfers on the down links fell from about 600
    to 55 in that run, and wide injections from about 650 to 138.
* **Technology and placement.** Not modelled; only the clock ratio `CF`
  enters the RTL.

Outside the NoC, and not part of this RTL:

* the sensing die;
* ADCs;
* analog accelerators;
* processors and SIMD units;
* clock generation;
* the vertical wires themselves (they are plain connections here).
