# DyNoC: a mesh network on chip that routes round dynamically placed modules

On a run-time reconfigurable device, modules are loaded into rectangular
regions while the system runs. A module placed in the middle of the chip
still has to talk to other modules and to the package pins. DyNoC covers the
device with a 2-D mesh of routers. When a module is placed, the routers under
it are switched off (their logic may serve the module) and the routers round
it steer packets round the hole. The module then joins the network through a
single router at its upper right corner.

Two rules keep this working:

* **A ring of live routers round every module.** A module is built so that its
  outer edge is processing elements only, never routers. Two modules
  therefore never touch, and a module never touches the edge of the device.
  Every live router can then still reach every other.
* **S-XY routing** (surrounding XY). This is XY routing (first east/west, then
  north/south) plus two detour modes for a deactivated neighbour. A one-bit
  stamp in the packet stops two routers from bouncing a packet between them.
  With *router guiding*, each module also tells the routers on its border
  which way round it is shorter.

This RTL is a synthesizable version of that network: the router, the mesh,
and the logic that turns module rectangles into activation and guide lines.
The default size is that of the published prototype, a 3 x 3 mesh with
32-bit packet data. Its test scenario is that prototype's: the centre router
(2,2) is covered, so traffic has to go round it.

## Files

| file | what it is |
|---|---|
| `rtl/dynoc_pkg.sv` | packet (`flit_t`), port numbering (`port_e`), module rectangle (`comp_rect_t`), widths |
| `rtl/input_buffer.sv` | FIFO at each router input |
| `rtl/sxy_route.sv` | combinational S-XY route decision for one head packet |
| `rtl/rr_arbiter.sv` | round-robin arbiter, one per router output |
| `rtl/dynoc_router.sv` | five-port router (N, E, S, W, local) |
| `rtl/placement_lines.sv` | module rectangles to router activation, guide lines and access routers |
| `rtl/dynoc_top.sv` | NX x NY mesh, local ports and edge pins brought out |
| `tb/tb_*.sv` | self-checking testbenches (see *Verification*) |

## Coordinates, packets and pins

Routers sit at x = 1..NX (west to east) and y = 1..NY (south to north).
Every per-router array in the RTL is indexed `[x-1][y-1]`. The coordinates
one step outside the mesh are the package pins: (x, 0), (x, NY+1), (0, y)
and (NX+1, y). Each edge router's outer port is a pin link on the top level
(`pin_s_*[x-1]`, `pin_n_*[x-1]`, `pin_w_*[y-1]`, `pin_e_*[y-1]`).

A packet is one flit of 45 bits:

| field | bits | meaning |
|---|---|---|
| `dx`, `dy` | 4 + 4 | destination router or pin |
| `stamp` | 1 | 1 while the packet is being taken round a module |
| `data` | 32 | payload (`DATA_W`) |

The 32-bit payload suits the prototype applications. Those send a 12-bit X
and a 12-bit Y scan position one way and a 24-bit colour back. To build an 8,
16 or 64-bit network, change `DATA_W` in `dynoc_pkg`. The 4-bit coordinates
(`COORD_W`) allow meshes up to 14 x 14. Clients inject packets with `stamp = 0`.

Every link is valid/ready. A flit moves in a cycle where both are 1, and the
sender holds it unchanged until then (an assertion in the router checks
this). A flit accepted at a router input in cycle t leaves on the chosen
output in cycle t+2, so an idle network costs two cycles per router on the
path, including the last one.

## How a router decides (sxy_route)

Each router knows four things: its position, which neighbours are active,
which directions lead off the mesh, and the guide line from any module on
each side. For the packet at the head of each input FIFO it computes:

1. **Preferred direction (N-XY).** East or west until x matches, then north
   or south until y matches, then the local port. For a pin, the edge router
   in the pin's row or column counts as having reached it on that axis. The
   packet therefore corrects its other coordinate inside the mesh first,
   then steps out onto the pin.
2. **A stamped packet continues straight.** "Straight" means opposite its
   arrival port. It goes on straight while its neighbour on the obstacle
   side is deactivated. The obstacle side is the side towards the
   destination on the other axis. The first router whose obstacle-side
   neighbour is active again is the ring corner. There the stamp is cleared
   and the packet turns the corner; XY routing then resumes.
3. **Preferred direction free:** take it. "Free" means active, not a pin side
   (unless delivering to that pin), and not the port the packet came in on.
4. **East/west blocked (SH-XY):** turn north if the destination y is at least
   the router's y, otherwise south. Then set the stamp.
5. **North/south blocked (SV-XY):** turn east. Then set the stamp.
6. **With router guiding (`GUIDED = 1`, the default):** in steps 4 and 5 the
   guide line from the blocking module picks the turn instead: 1 = west or
   north, 0 = east or south.
7. If the chosen turn is not free, the other turn is taken. After that comes
   straight back the way the packet was going, and last the arrival port.

Why the stamp matters, on a packet heading south that meets the top of a
module: it turns east. At the next router XY would send it west again, and
the two routers would trade the packet for ever. The stamp makes that router
pass the packet on east instead. At the module's top-right corner the
packet's south neighbour is live again, so it turns south and loses the
stamp. There it meets the module's east side, which is step 4: turn south
again, with a stamp, down to the bottom corner. There it turns west, and
plain XY takes it home.

The three modes are not stored in the router. Each packet's decision is
made afresh from the current neighbour state, which amounts to the same
thing.

Never sending a packet straight back out of the port it came in on is this
design's reading of "do not send the packet back". It matters in one case.
A packet that has just turned a corner must not be guided straight back
round it.

## Placement, activation and guide lines (placement_lines)

A placed module is given as a rectangle `{valid, x0, y0, w, h}`. It covers
routers x0..x0+w-1 and y0..y0+h-1. The block derives three things from it:

* `active = 0` for every covered router. A deactivated router accepts
  nothing, sends nothing, and drops what it held.
* For each router next to a module, a guide bit for that side. The bit points
  to the nearer corner of the module's side, as drawn in the router-guiding
  figure. On a side of 4, the two western routers get "west" and the two
  eastern ones "east". On a side of 5, the top three get "north" and the
  bottom two "south", so a tie goes north. A tie on a horizontal side goes
  west, by the same rule.
* The access router (x0+w, y0+h), just outside the module's upper right
  corner. The module's traffic uses that router's local port.

Neighbours learn that a router is off from its `active` bit, which is the
module's activation line. The RTL does not check that modules are kept
apart by a ring of routers; that is the placer's job.

## Timing and sizes

| parameter | default | origin |
|---|---|---|
| `NX`, `NY` | 3, 3 | size of the published prototype |
| `DATA_W` | 32 | packet width of the prototype applications |
| `NCOMP` | 4 | this design's choice |
| `FIFO_DEPTH` | 4 | this design's choice |
| `GUIDED` | 1 | this design's choice (0 gives fixed detours) |

Per router: 5 FIFOs of 4 x 45 bits, 5 output registers and 5 arbiters.
The 3 x 3 mesh elaborates to about 13,500 word-level cells, 2,340 flip-flop
bits and 7,380 memory bits, before any technology mapping. Reset is
synchronous and active low.

## Where this departs from, or adds to, the published description

* **Stamp kept with guiding.** The description says router guiding makes the
  stamp unnecessary. Without it, the reflection between two routers on top
  of a module comes back, so the stamp is kept. The guide bit only replaces
  the choice of turn.
* **SV-XY turns east.** The side is left open in the description; east (or
  the guide line) is used here.
* **Router internals are this design's own:** single-flit packets, input
  FIFOs, round-robin arbitration, two cycles per hop. The source gives only
  area, memory and clock figures for FPGA routers.
* **Covering a live router.** Packets inside a router when it is covered are
  dropped. How to clear a region before placement is left open in the source.
  The tests drain the network before they change a placement.
* **Deadlock.** The routing argument rules out livelock (packets circling a
  module). With finite buffers, a cycle of full FIFOs round a module is not
  ruled out by this design. No deadlock occurred in the tests.
* **Router guiding is not always shorter.** It shortens a trip that starts
  near one corner of a module: 14 instead of 22 cycles in the test. In
  random traffic round a single 3 x 3 module, mean latency was about the same
  (12 cycles without guiding, 13 with).
* **Heavy background traffic.** With 5% background injection per router, a
  full 640 x 480 colour-generator frame needs 1.08 router cycles per pixel.
  That is well within the three cycles that 77 MHz routers allow a 25 MHz
  pixel clock. At 20% background injection the application fell to about 14
  cycles per pixel. Equal round-robin sharing does not shield one flow from
  saturated neighbours.
* **Not modelled:** the processing elements and their direct local wires,
  the reuse of covered routers as module logic (which needs device
  reconfiguration), and the applications themselves.

## Verification

Every testbench checks its results against values worked out independently,
and prints `TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_input_buffer` | FIFO against a queue model; exactly `DEPTH` entries; flush |
| `tb_sxy_route` | 21 hand-worked routing cases, with and without guiding: XY, pins, both surround modes, stamp continuation, corner, no U-turn, dead end |
| `tb_dynoc_router` | 2-cycle hop; 5 parallel flows; 4-way contention at 1 flit/cycle with round-robin order; back-pressure; guided detour with stamp; deactivation |
| `tb_placement_lines` | activation and guide bits of a 4 x 5 and a 1 x 1 module on a 9 x 7 mesh, then removal |
| `tb_dynoc_top` | default 3 x 3 mesh with (2,2) covered. Idle latencies of 6 cycles (straight) and 10 (round the hole). About 21,000 random packets between local ports and pins with random receiver stalls, then the module removed and placed again. Counts each mechanism (SH-XY, SV-XY, stamp removal, stall, contention, pin and local delivery, deactivation, reactivation) and fails if any did not occur |
| `tb_dynoc_color_app` | full 640 x 480 frame: scan positions from (1,1) to a colour generator at (3,3) and colours back, in order, beside background traffic; rate check |
| `tb_dynoc_guiding` | two 5 x 5 meshes, one with and one without guiding, with the same traffic. Exact path lengths round a 3 x 3 module, then random traffic round it and round two stacked modules |

To run one with plain Verilator from the project root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/dynoc_pkg.sv \
    tb/tb_dynoc_top.sv --top-module tb_dynoc_top && ./obj_dir/Vtb_dynoc_top
```

The testbenches reach inside the router for their event counters, through
hierarchical names (`dut.g_x[i].g_y[j].u_router...`). If you rename the
generate blocks, update those names. `tb_dynoc_guiding` simulates 50 routers,
and Verilator takes several minutes to compile it.
