# METRO network-on-chip: scheduled traffic on a simple mesh

A spatial DNN accelerator places many layers or operators on a grid of cores at once. Their
traffic is known before the program runs: which core sends how much data to which cores, and when.
METRO uses that knowledge. Software picks each message's path, its priority and the cycle it may
be injected. The network hardware can then be much simpler than a general-purpose NoC:

- There are no virtual channels, so no VC allocation or VC arbitration is needed.
- A message moves as one large chunk (one head flit followed by its payload flits).
- Routing needs no adaptivity. A message either follows a short list of waypoints from its head
  flit with plain XY routing, or follows a small per-router table that software wrote before the
  run.
- When two messages want the same link, the one software gave the higher priority wins. The other
  waits at its router until the winner's tail flit has passed.
- Software can avoid conflicts altogether by delaying injection. The network interface holds a
  message until the global clock reaches the injection time computed for it.

This repository holds synthesizable SystemVerilog for the interconnect: the router, the network
interface and a 16 x 16 mesh of both, each with a self-checking testbench. The compute cores, their
buffers and the HBM memory system are not included. The mesh exposes each node's core-side
interface as ports.

## Flits and messages

A link carries a valid bit, a 2-bit flit type and a 1024-bit data word (`metro_pkg`):

| type      | meaning |
|-----------|---------|
| `FT_HEAD` | first flit; the low bits hold the routing header, the rest is unused |
| `FT_BODY` | payload |
| `FT_TAIL` | last payload flit; releases the links the head reserved |

A message of `len` payload words is one head plus `len` flits, with the last of them typed
`FT_TAIL`. So `len` is at least 1, and one head carries a whole data chunk.

The header (`head_t`, 92 bits, packed from bit 0 upward) has these fields:

- `msg_id` (12 bits): names the message in routing tables and at the receiver.
- `prio` (12 bits): a larger value wins a conflict.
- `crit[0..7]`: up to eight critical nodes (waypoints) as `{y, x}` coordinates of 4 bits each.
- `crit_cnt`: how many of the waypoints are still pending.

The field widths are this design's choice. 12-bit ids and priorities leave room for the few
thousand messages a full multi-model mapping produces.

Coordinates: node `n` sits at `x = n % K`, `y = n / K`. `y` grows southward. Router ports are
numbered 0 local, 1 north, 2 east, 3 south and 4 west. A port mask has one bit per port.

## Hybrid routing: waypoints, then tables

This is the least conventional part of the router, and it lives in `metro_route_compute`. Every
input port has its own route-compute unit. It looks at a head flit when the flit arrives and does
the following:

1. **Pop.** If `crit_cnt > 0` and the first waypoint is this router, the waypoints shift down by
   one and `crit_cnt` decreases. The head flit is rewritten with the new header and then buffered.
   At most one waypoint is popped per router.
2. **Waypoint mode** ("pop-then-calculate"). If waypoints remain, the output is the XY route
   toward the first one (`metro_xy_route`): correct X first, then Y.
3. **Table mode.** If no waypoints remain, the router looks up `msg_id` in its routing table
   (`metro_route_lut`). The entry is an output-port mask. It may name several ports (a multicast
   fork) and may include the local port (eject here and possibly also forward). A message whose
   id is missing is ejected locally, and the router raises `stat_lut_miss`. Software is expected
   never to let that happen.

A message therefore travels cheaply with XY routing as far as the point where its path must bend
away from XY or fork. From there the tables carry it. Each table holds 16 entries
(`LUT_ENTRIES`), matched associatively, with the lowest matching entry winning. A single bus
writes the tables before a run. On the mesh this bus is `cfg_we / cfg_node / cfg_idx / cfg_valid /
cfg_msg_id / cfg_mask`.

Example (test `tb_metro_top`, 4 x 4 mesh). Node 2 multicasts to nodes 9, 14 and 13, with waypoints
8 and 11:

- XY routing takes it 2 → 3 → 4 → 8, and pops 8.
- XY routing then takes it 8 → 7 → 11, and pops 11.
- The table at node 11 holds `{9 & 14}`, and the tables at 10 and 12 fork further and eject.

## Router pipeline

`metro_router` has five ports and no virtual channels. A head flit spends four cycles per hop:

| cycle | stage | what happens |
|-------|-------|--------------|
| 1 | LT    | the flit crosses the link into the input register |
| 2 | BW/RC | route compute; the flit and its port mask are written into the input FIFO |
| 3 | SA    | a head at the FIFO front requests every port in its mask; the grant is registered |
| 4 | ST    | the flit leaves the FIFO through the crossbar into the output register |

Body and tail flits skip SA. They follow the ports reserved by their head, one flit per cycle per
input. The router can therefore stream a chunk at one flit per cycle after a head latency of four
cycles per hop.

### Switch allocation by priority (`metro_switch_alloc`)

The allocator keeps, for each output, whether it is busy and which input owns it. In each cycle,
every idle input with a head at its FIFO front requests its whole port mask. Each free output
picks the requesting head with the highest `prio`, and ties go to the lower input number. A head
is granted only if it wins **all** of its outputs in the same cycle. This is all-or-nothing: a
multicast never holds half its ports while waiting for the rest. Granted outputs stay reserved
until that input sends its `FT_TAIL` flit. An output already held is never taken away, even by a
higher priority. A losing head simply asks again the next cycle. `stat_sa_blocked` flags each
input that asked and was refused.

### Credits and the crossbar

Each output has a credit counter (`metro_credit_mgr`) sized to the downstream FIFO depth
(`BUF_DEPTH = 8`). A flit moves only when **every** port in its mask has a credit. A multicast flit
is therefore copied to all of its outputs in the same cycle (`metro_crossbar` lets several outputs
select one input). A receiving router returns one credit per popped flit, one cycle later. With a
5-cycle credit loop, 8 slots keep a link busy every cycle. `stat_credit_stall` flags an input
that has a grant but waits for credits.

## Network interface and injection time control

`metro_ni` sits between a core and its router's local port.

**Injection.** The core posts a descriptor with these fields:

- `desc_time`: the injection cycle.
- `desc_hdr`: the header.
- `desc_len`: the payload length in flits.

Descriptors wait in a small queue (`DESC_DEPTH = 4`) and are served in order. The NI sends the
head flit once both of these hold:

- `time_now >= desc_time`. `time_now` is one free-running counter shared by the whole mesh.
- The router has a free input slot.

The NI then pulls `desc_len` words from the core over a valid/ready handshake (`pay_*`) and sends
them, one per cycle when credits allow, with the last one typed tail. `stat_inj_wait` shows a
descriptor that is ready but still early.

Holding a message back until its path is clear is how software removes conflicts. Test
`tb_metro_top` shows the effect. Three messages cross on shared links:

- Without delays, the lowest-priority message waits behind the others through back-pressure, and
  its last flit arrives after 83 cycles.
- With software-chosen injection times, it arrives after 26 cycles.

**Ejection.** Flits from the router go into a FIFO. The head is consumed and its `msg_id` is
remembered. Payload words come out on `rx_valid / rx_ready / rx_data`, with `rx_msg_id` attached
and `rx_last` on the tail.

## The mesh (`metro_top`)

`metro_top` builds a `MESH_K x MESH_K` mesh (16 x 16 by default) with the following contents:

- One router and one NI per node.
- Wiring between neighbouring ports, including the credit wires.
- The global `time_now` counter.
- The routing-table write bus.

Ports on the mesh edge are tied off. A route that leads off the edge is a software error: the
head would wait forever. Per-node core-side signals and event flags are arrays indexed by node
number.

## Parameters

| parameter | default | notes |
|-----------|---------|-------|
| `MESH_K` | 16 | mesh side |
| `DATA_W` | 1024 | flit payload width |
| `BUF_DEPTH` | 8 | input FIFO depth and credits per link; own choice |
| `LUT_ENTRIES` | 16 | routing-table entries per router; own choice (3 per operator mapped to a core, up to 5 operators) |
| `DESC_DEPTH` | 4 | NI descriptor queue; own choice |
| `TIME_W`, `LEN_W` | 32, 16 | time counter and message length widths; own choice |
| `MSG_ID_W`, `PRIO_W`, `MAX_CRIT` | 12, 12, 8 | header fields, in `metro_pkg`; own choice |

The mesh size and flit width are the published configuration. The remaining sizes are not
published and were chosen as listed.

## How far it can be trusted, and where it departs

Every module has a self-checking testbench, and all of them pass. Each testbench was also run
against a deliberately broken copy of its module and caught the fault. The following are covered:

- The FIFO, against a reference queue.
- XY routing, exhaustively.
- Table lookup and route compute, against independent models, including the example path above.
- The allocator, against a reference arbiter, with checks of grant rules, priority and release.
- The credit counter and the crossbar.
- The router:
  - head latency of exactly 4 cycles;
  - streaming at one flit per cycle;
  - priority order;
  - multicast with back-pressure;
  - a table miss.
- The NI: injection time, message framing and ejection.
- The mesh end to end, in `tb_metro_top` (4 x 4, 128-bit flits). It runs the multicast example, a
  three-way conflict with and without injection delays, and a table miss. It counts each of these
  mechanisms and fails if any of them never occurs:
  - waypoint routing;
  - table routing;
  - allocation blocking;
  - credit stalls;
  - injection waits;
  - a table miss.
- The full 16 x 16, 1024-bit mesh at default parameters lints and elaborates cleanly, but it has
  not been simulated. Verilator turns it into several hundred C++ files, which take far longer than
  ten minutes to compile. The largest configuration simulated is the 4 x 4 mesh with 128-bit
  flits in `tb_metro_top`. The modules are written for any `MESH_K` and `DATA_W`, and nothing in
  them depends on the size except the coordinate width (4 bits, enough for 16 x 16).

Departures and own choices:

- **Waypoint branches.** A header in the original description can name a branch among the
  waypoints (for example "then 10 or 12"). Here the waypoint list is linear, and every fork is
  made by a table entry. The same paths can be expressed, at the cost of table entries.
- **All-or-nothing multicast allocation, no pre-emption.** A higher-priority head waits for a
  lower-priority message that already holds the port. It does not interrupt it.
- **Timing detail.** The original work describes a three-stage router plus link traversal. The
  stage boundaries and the credit timing here are this design's reading of that.
- **Not included.** The compute cores (MAC array, buffers, controller), the HBM and its memory
  controllers, and the links to other chips. The NI's `desc_*`, `pay_*` and `rx_*` ports are where
  a core would connect.
- **Software side.** The scheduler that computes paths, priorities, injection times and table
  contents is outside this RTL. The testbenches contain hand-written schedules.
- **Lint.** Some lint warnings remain: unused header bits and FIFO `count` outputs, and a reset
  used both in logic and in assertion `disable iff`. None is a circuit problem.

## Files

- `rtl/metro_pkg.sv`: types and constants.
- `rtl/metro_flit_fifo.sv`, `metro_xy_route.sv`, `metro_route_lut.sv`, `metro_route_compute.sv`,
  `metro_credit_mgr.sv`, `metro_switch_alloc.sv`, `metro_crossbar.sv`: router parts.
- `rtl/metro_router.sv`, `rtl/metro_ni.sv`, `rtl/metro_top.sv`.
- `tb/tb_<module>.sv`: one testbench per module.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Example with Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_metro_router \
    rtl/metro_pkg.sv tb/tb_metro_router.sv -y rtl +libext+.sv
./obj_dir/Vtb_metro_router
```

Replace the module name for any other testbench. A mesh at the full 16 x 16, 1024-bit size
builds a very large model. Simulate at reduced `MESH_K` and `DATA_W`, as `tb_metro_top` does,
unless you can afford a long C++ compile.

To change a size, override the parameters on `metro_top`, for example
`metro_top #(.MESH_K(8), .DATA_W(256))`. To change the header layout, edit `head_t` and the width
constants in `metro_pkg.sv`. Every module takes its field widths from there. Keep `HDR_W <=
DATA_W`, and keep the coordinate width large enough for `MESH_K`.
