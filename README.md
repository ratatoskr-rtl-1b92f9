# A lightweight virtual-channel router and 3D mesh NoC in SystemVerilog

Stacking dies gives a network-on-chip a third dimension: next to the four
neighbours in a layer, each router has one above and one below. This
SystemVerilog design is a small 3D mesh NoC of that kind. Every tile holds a
wormhole-switched router with virtual channels (VCs) and a processing element
that sends uniform random traffic. The router is built to stay cheap, so that
it could also sit in an expensive technology layer such as a mixed-signal die:

* The buffers are shallow, 4 flits per VC by default. Wormhole switching and credit
  flow control make that enough.
* The allocators are simple. They use round-robin arbiters, take one
  request per input port per cycle, and do no maximum matching.
* The crossbar leaves out the connections the routing algorithm can never
  use. With XYZ dimension-ordered routing, 30 of the 49 input/output pairs of
  a 7-port router remain.

The default configuration is a 4x4x4 mesh (64 tiles) with XYZ routing. Each
port has 4 VCs of 4 flits, and packets are 32 flits long.

## Flits, links and credits

A flit is a 2-bit type plus a 32-bit payload (`noc_pkg::flit_t`):

| type | meaning |
|---|---|
| `FT_HEAD` | first flit of a packet; payload = `head_t` {dst, src, seq} |
| `FT_BODY` | middle flit |
| `FT_TAIL` | last flit; releases the VC |
| `FT_SINGLE` | a one-flit packet (head and tail at once) |

Coordinates are 4 bits per dimension, packed as {z, y, x}, so a mesh can have
up to 16 routers per dimension. `head_t` is destination (12 bits), source
(12 bits) and an 8-bit sequence number, which fills the 32-bit payload.

Each direction between two routers has two signals:

* `link_t` goes downstream. It carries `valid`, a 3-bit VC number and a flit.
* `credit_t` goes upstream. It carries `valid` and a 3-bit VC number.

A sender keeps one credit counter per downstream VC. The counters start at
`DEPTH`. Sending a flit uses a credit. The receiver returns the credit the
cycle after the flit leaves its buffer, so a buffer can never overflow. The
input units assert this.

Ports are numbered 0–6: local, east (+x), west (−x), north (+y), south (−y),
up (+z), down (−z).

## Inside the router

```
             +-------------------- router ---------------------+
 in_link[p]->| input_unit[p]: VC0..VC3 FIFOs, per-VC state      |
credit_out<- |     | front flits, state                          |
             |     v                                            |
             | control_unit: routing_unit per VC                |
             |               vc_allocator  (input-first, RR)    |
             |               switch_allocator (separable, RR)   |
             |               output_unit per port (credits,     |
             |                             VC ownership)        |
             |     | select, flit per input                     |
             |     v                                            |
             | crossbar (AND-OR mux, impossible turns absent)   |
             |     |                                            |
             |  output register --------------------------> out_link[o]
 credit_in ->|  (to output_unit[o])                             |
             +--------------------------------------------------+
```

### Input unit (`input_unit`, `vc_buffer`)

Each VC has a first-word-fall-through FIFO of `DEPTH` flits and three pieces
of state:

* `active`: the VC holds a packet that already has an output.
* `out_port`: the allocated output port.
* `out_vc`: the allocated downstream VC.

An idle VC must have a head flit at its front. An assertion checks this. A VC
becomes active when the VC allocator grants it, and idle again when its tail
flit is popped.

### Control unit (`control_unit`)

The control unit is where the router's decisions are made. Each cycle:

1. **Routing computation.** A `routing_unit` per VC computes the output
   port from the destination in the head flit at the front of the VC. XYZ
   routing corrects x first, then y, then z. Only idle VCs use the result.
2. **VC allocation** (`vc_allocator`). This stage is separable and
   input-first:
   * Each input port offers one of its waiting head VCs. A round-robin
     pointer picks the VC, and the pointer only moves on when that VC has
     been acknowledged. A VC that loses keeps asking until it wins.
   * Each output port takes the requests that name it and acknowledges one
     input, again round robin.
   * The winner gets the output's lowest-numbered free downstream VC.
   * If an output has no free VC, it acknowledges nobody.
3. **Switch allocation** (`switch_allocator`). This stage is also separable
   and input-first:
   * A VC can request the crossbar if it is active, has a flit, and holds a
     credit for its downstream VC.
   * Each input picks one such VC round robin.
   * Each output picks one of the inputs that want it, round robin.
   * No matching beyond this is attempted. With few VCs the loss against a
     maximal matching is small.
4. **Output units** (`output_unit`). Each output port keeps, per
   downstream VC:
   * the credit counter;
   * a busy flag, set when the VC is allocated to a packet and cleared when
     that packet's tail is sent.

   `vc_free` goes to the VC allocator and `credit_ok` goes to the switch
   allocator.

VC allocation and switch allocation work on different VCs in the same cycle.
A packet whose VC is allocated at cycle t can have its head switched at t+1.

### Crossbar (`crossbar`)

Each output is an AND-OR multiplexer over the inputs. The turn table
`noc_pkg::turn_allowed()` decides which inputs are included. With XYZ
routing, a flit:

* never makes a U-turn;
* from the local port may go anywhere;
* on x may continue in x, turn into y or z, or eject;
* on y never goes back to x;
* on z only continues in z or ejects.

A pair that is excluded is simply absent from the OR, so synthesis removes
its gates. Setting `ROUTING = RT_FULL` keeps all 49 pairs. This is the fully
connected baseline, with the same routing.

### Timing

All registers are clocked on one rising edge. Reset is asynchronous and
active low.

| event | cycle |
|---|---|
| head flit arrives on `in_link` (registered into the VC buffer) | t |
| VC allocation (routing result used combinationally) | t+1 |
| switch allocation and crossbar traversal into the output register | t+2 |
| head flit on `out_link` | t+3 |
| credit for it on `credit_out` | t+3 |

A packet's body flits follow one per cycle, as long as credits allow. A
router-to-router hop therefore costs 3 cycles for the head. One 4-flit buffer
per VC lets a single VC stream at full rate: the credit loop is 4 cycles
long.

## Processing element (`processing_element`)

The processing element has a source and a sink.

**Source.** A 32-bit xorshift generator decides each cycle whether a new
packet is born, with probability `INJ_RATE_PERMILLE / (1000 · PKT_LEN)`.
`INJ_RATE_PERMILLE` is in flits per cycle per tile. Packets wait in an
unbounded source queue, which is a counter. Each packet then gets:

* a destination drawn uniformly over the mesh and redrawn if it is the tile
  itself;
* VC = packet number mod `NUM_VC`.

The head flit carries the destination, the source and a sequence number. Body
and tail flits carry the cycle the head left the tile.

**Sink.** The sink returns a credit for every flit immediately. It also
counts three kinds of errors:

* heads addressed to another tile;
* flits outside a packet;
* packets whose length is wrong.

From the tail's timestamp it adds up the packet latency and keeps the maximum.
Latency runs from the head leaving the tile to the tail arriving, so time
spent in the source queue is not included.

## The NoC (`noc_3d`)

`noc_3d` places `DIM_X × DIM_Y × DIM_Z` tiles. Each router connects its east
port to the west port of x+1, north to the south of y+1, and up to the down
of z+1. Ports at the mesh boundary are tied off. Each tile's statistics
counters come out as flat arrays indexed by `x + DIM_X·(y + DIM_Y·z)`.
`inject_en` starts and stops all sources.

A 2D mesh is `DIM_Z = 1`. Its up and down ports are tied off and never used.

## Parameters

| parameter | default | where |
|---|---|---|
| `DIM_X`, `DIM_Y`, `DIM_Z` | 4, 4, 4 | `noc_3d`, `processing_element` |
| `NUM_VC` | 4 (up to 8) | all |
| `DEPTH` | 4 flits | buffers and credit counters |
| `PKT_LEN` | 32 flits | `processing_element`, `noc_3d` |
| `INJ_RATE_PERMILLE` | 70 (0.07 flits/cycle/tile) | `processing_element`, `noc_3d` |
| `ROUTING` | `RT_XYZ` (`RT_FULL` = unpruned crossbar) | router, crossbar |
| `FLIT_W`, `COORD_W` | 32, 4 | `noc_pkg` |

## Where this design departs from the reference architecture

* **Uniform buffer sizes.** The reference router lets the VC count and buffer
  depth be chosen per router, per port and per VC. Here one `NUM_VC` and one
  `DEPTH` apply to every port of every router.
* **One clock domain.** The reference framework targets heterogeneous
  stacks where layers run at different clock speeds. Here all layers share
  one clock, and vertical links are ordinary registered links.
* **No Z+(XY)Z− routing, and no high-throughput router.** The
  Z+(XY)Z− routing and its pruned crossbar are not built. The
  pseudo-mesochronous high-throughput router variant, which the synthesis
  figures of the reference refer to, is not built either. Only XYZ routing
  (pruned or full crossbar) is available.
* **No trace-driven injection or data conversion.** The trace-driven
  traffic generator and the data converter are not included. The only
  traffic source is the uniform random processing element.
* **Our own choices.** The following were chosen here:
  * the flit encoding and widths;
  * the pipeline depth (3 cycles per hop);
  * the round-robin pointer rules;
  * the one-cycle credit return;
  * the traffic generator, and the VC choice as packet number mod `NUM_VC`.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_vc_buffer` | random push/pop against a queue model: front, empty, full, count |
| `tb_input_unit` | per-VC order, VC state held through a packet, release on tail, credit one cycle after pop, credit conservation |
| `tb_routing_unit` | all 64×64 current/destination pairs of a 4×4×4 mesh against XYZ computed from coordinate differences |
| `tb_vc_allocator` | grant rules (requesting VC, its route, lowest free VC, one winner per output), and round robin across inputs and across VCs |
| `tb_switch_allocator` | grant/select consistency, no idle output when requests exist, round robin |
| `tb_output_unit` | credit counters and ownership against a model, including a credit and a send in the same cycle |
| `tb_control_unit` | the control unit with modelled buffers and downstream routers: XYZ outputs, free downstream VCs, credits before every send, no interleaving of packets on a VC, full drain |
| `tb_crossbar` | every input/output pair, pruned or passed; 30 legal pairs for XYZ; full crossbar passes all 49 |
| `tb_router` | a router at (1,1,1): zero-load head latency of 3 cycles, two inputs to one output on VCs 0 and 1, back-pressure with exactly `DEPTH` flits passing, 240 random packets with reference routing |
| `tb_processing_element` | packet format, credit limit, injection rate within ±15 %, every destination drawn, drain, receive-side latency sums and error detection |
| `tb_noc_3d` | a 2×2×2 mesh at 0.2 flits/cycle (past saturation) with 8-flit packets; all packets delivered intact. It also counts, in every router, lost VC allocations, lost switch allocations, credit stalls, several VCs of one output in use, vertical traffic and queued packets, and fails if any of these never happens |
| `tb_noc_3d_full` | the default 4×4×4 NoC with no parameter overrides: uniform random traffic at 0.07 flits/cycle/tile for 100,000 cycles, then drain. Checks: no errors, every packet delivered, packet count within 5 % of the offered load, plausible latency |

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/noc_pkg.sv tb/tb_router.sv \
          --top-module tb_router -Mdir obj_router
./obj_router/Vtb_router
```

The default-size NoC takes about three minutes to build. The 100,000-cycle
run takes under a minute to simulate. It delivers about 14,000 packets with a
mean packet latency of about 50 cycles (tail arrival minus head injection),
so the network is still below saturation at this load. That is lower than the
reference measurements for this configuration (roughly 120 ns at 1 GHz, and
saturation from about 0.055). Those measurements were taken on a different,
high-throughput router variant with a packet length that is not known here.
To sweep the load, set `INJ_RATE_PERMILLE` (10–80 covers 0.01–0.08).
