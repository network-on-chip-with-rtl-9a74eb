# RTSNoC: a mesh network-on-chip that interleaves flits

RTSNoC is a network-on-chip for systems with real-time traffic. Most
networks reserve a path for a whole packet (wormhole switching), so a short
urgent packet can wait behind a long one. RTSNoC routes every flit on its own
instead. Each flit carries its full destination address. Each router output
takes one flit per arbitration cycle from whichever inputs want it, in
round-robin order. Packets that share a link are woven together flit by flit
rather than queued whole. As a result, the time a packet needs depends only on
how many flows compete with it on its path and on its own length, not on how
long the other packets are.

The router has eight ports, named after the compass points. One router can
serve up to six or seven cores, and a 2x2 mesh of four routers connects 24
cores. Routers do not store packets: each output port holds a single flit, and
the only real buffers are the FIFOs in the network interfaces at the two ends.

This repository holds synthesizable SystemVerilog for the router, for a
configurable mesh of routers with network-interface FIFOs, and testbenches.
The testbenches cover each block, the whole 24-core network, and the latency
and priority behaviour the design is known for.

## Flit format

A flit is 19 bits (`rtsnoc_pkg::flit_t`):

| bits   | field      | meaning |
|--------|------------|---------|
| 18     | `ctrl`     | header/tail marker, carried through, not used by the routers |
| 17:13  | `tag`      | free field, carried through (the testbenches put the source core there) |
| 12:8   | `dst`      | destination `{x[1], y[1], port[3]}` |
| 7:0    | `data`     | payload |

Only the width (19 bits) and the position of the destination are taken from
the published flit examples. In those examples, flits for the core at router 2,
port NN, read `4_0871` and `0_0872`: the `08` part decodes as x=0, y=1,
port=0. The split of the remaining bits into `tag` and `data` is this design's
choice. To change the mesh size or payload width, edit the widths in
`rtsnoc_pkg`.

Port codes: NN=0, NE=1, EE=2, SE=3, SS=4, SW=5, WW=6, NW=7. North is +y and
east is +x. Router `r = y*MESH_X + x`, so router 0 is bottom-left, router 1 is
to its right, router 2 is above it and router 3 is diagonal to it.

## The mesh and its cores (`rtsnoc_mesh`)

The top module builds a `MESH_X` x `MESH_Y` mesh (default 2x2). Neighbouring
routers are joined through their NN/SS and EE/WW ports. Every other port is a
core port. Each core port has two `ni_fifo` buffers (default depth 4): one
towards the network and one from it.

The core interface is a set of arrays indexed `[router][port]`:

- `c_din`, `c_wr`, `c_wait`: core to network. A write while `c_wait` is high
  is lost, so hold the flit until `c_wait` is low.
- `c_dout`, `c_nd`, `c_rd`: network to core. The FIFO head is visible while
  `c_nd` is high, and `c_rd` takes it.
- Entries for ports that join two routers are unused: their outputs are 0.

The default 24-core placement puts the cores on the six free ports of each
router. In the reference experiment:

| router | cores (port) |
|--------|--------------|
| 0 | 0 NE, 1 SE, 2 SS, 3 SW, 4 WW, 5 NW |
| 1 | 6 NE, 7 EE, 8 SE, 9 SS, 10 SW, 11 NW |
| 2 | 12 NN, 13 NE, 14 SE, 15 SW, 16 WW, 17 NW |
| 3 | 18 NN, 19 NE, 20 EE, 21 SE, 22 SW, 23 NW |

The diagonal ports (NE, SE, SW, NW) are always core ports. Routing is XY: a
flit first moves east or west until its column matches, then north or south,
and at the destination router it leaves on the port named in its address.

## Inside a router

`router` is made of:

- eight `input_if`, each with an `xy_route` routing controller;
- one `allocator` holding eight `wrr_arbiter`s, one per output;
- an 8x8 `crossbar`;
- eight single-flit `output_if` buffers.

There are no input buffers. A flit waits on the input wires, held there by its
sender, until it is taken.

### Channel handshake

Each port has an input channel and an output channel:

- Input channel: `i_din`, `i_wr`, `o_wait`. The sender raises `i_wr` with a
  flit and holds both until a clock edge at which `o_wait` is low. That edge
  is when the flit is taken.
- Output channel: `o_dout`, `o_nd`, `i_rd`. `o_nd` is high while the output
  buffer holds a flit. The receiver takes it at an edge where `i_rd` is high.

Between two routers, the upstream output drives the downstream input:
`o_dout → i_din` and `o_nd → i_wr`. The upstream buffer is emptied when the
downstream router takes the flit: `i_rd = i_wr && !o_wait`. The input
interface and output buffer both check their half of this protocol with
assertions.

### The two-clock arbitration cycle

This is the part of the design that needs the most care. A flit spends two
clocks in a router, and each output moves at most one flit every two clocks.
Each output's arbiter alternates between two states:

1. **ARB.** If any input requests this output, the arbiter registers the
   winner.
2. **XFER.** The winner's flit goes through the crossbar into the output
   buffer, and the winning input receives its acknowledge (`o_wait` low).
   This happens only if the buffer can take the flit in this clock:
   `out_free = !o_nd || i_rd`, meaning the buffer is empty or its flit is
   being read now. If not, the arbiter stays in XFER with the same winner
   until it can.

Because `out_free` includes `i_rd`, a full buffer can be emptied and refilled
at the same clock edge. This is what lets a router-to-router link carry a flit
every two clocks, with one flit of storage and no extra credit logic. The
price is a combinational path.

When a downstream router takes a flit, the `i_rd` it sends back depends on its
own arbiter's `xfer`. That `xfer` depends on its own output's `i_rd`, and so
on along the flits' paths. So an acknowledge may ripple through several
routers in one clock. In the default 2x2 mesh the longest XY path crosses
three routers, so the chain is short. In a large mesh it limits the clock
frequency.

The chain never closes into a loop. Between two link ports the allocator
leaves out the transfers XY routing cannot make:

- a U-turn (leaving by the port the flit came in on);
- a turn from north/south back to east/west.

With those gone, every acknowledge path follows turns that XY routing allows,
and those form no cycle. The `LINK` parameter of `router`/`allocator` tells
which ports face another router; the mesh sets it. Tools that treat the
link-signal arrays as whole vectors may still warn of circular logic
(Verilator's `UNOPTFLAT`). There is no loop at bit level, and the simulation
results are exact.

Resulting timing, measured by `tb_router` and `tb_rtsnoc_mesh`:

- A flit presented to an idle router is in the output buffer 2 clocks later.
- A saturated output, to a core or to another router, delivers a flit every
  2 clocks.
- Each router adds 2 clocks to a flit's latency, and the network-interface
  FIFOs add a clock at each end.

### Arbitration and weights (`wrr_arbiter`)

Each arbiter keeps a priority order of the eight inputs as a matrix
(`prio[i][j]`: input i beats input j):

- After reset the order is NN, SS, EE, WW, NE, SE, SW, NW. The four link
  directions come first.
- The highest-priority requester wins. Normally it then drops to the bottom of
  the order, which gives round-robin among the competing inputs.
- An input can be given a weight `W` > 1. It then keeps its place for `W`
  grants in a row: a counter reloaded with `W` is decremented on each grant,
  and only when it runs out does the input drop to the bottom.

Weights exist for links that carry several flows. Without them, an input that
merges two flows gets the same share as an input that carries one, so each of
its flows gets half as much. With a weight equal to the number of flows it
carries, every flow gets an equal share of the destination.

`tb_fig2_priority` shows this with four flows into one core:

- Two flows merge at router 0's EE input (weight 2).
- Those two and a third flow share router 2's SS input (weight 3).
- The fourth flow comes from a core at router 2.

Over 2000 delivered flits:

- With the weights, each flow gets exactly 500.
- With every weight at 1, the flows get 250, 250, 500 and 1000.

`rtsnoc_mesh` takes a `WEIGHT[router][port]` table. Its default gives
router 2's SS and EE inputs weight 2, because each carries two flows in the
reference experiment. Every other input has weight 1. Weights are design-time
constants, up to 15 (`WGT_W` = 4 bits). A weight of 0 is treated as 1.

## Worst-case latency

Let a packet of `f` flits cross routers `1..h`, where at router `i` it competes
with `N_i` flows for the same output, and `k` flows in all share the
destination. Then the packet's latency is bounded by

    L <= sum_i 2*N_i + 2*k*(f-1) + 2*B

The first term covers the header: each competing flow can take one two-clock
slot before it at each hop. The second covers the remaining flits, which get a
1/k share of a channel running at one flit per two clocks. The last term
covers the network-interface FIFOs of depth `B`. Measured at the router ports,
without the FIFOs, the testbenches give:

| experiment | measured | bound (router ports) |
|---|---|---|
| core 7 → core 12, 6 flits, competing with four streaming flows (cores 3, 13, 18, 23) | header 14 clocks, packet 64 clocks | 66 |
| core 7 → core 12, 9 flits, alone | 22 clocks | - |
| same, two competitors (cores 3, 13) sending packets of 100 / 1000 / 65536 flits | 56 / 58 / 56 clocks | 60 |

The published measurement of the first experiment, on an FPGA, was 12 clocks
for the header and 62 for the packet. The difference of about two clocks comes
from where exactly the arbiters stand when the packet arrives, and from the
handshake timing chosen here, which was not published. The second experiment
shows the main property of the design: the short packet's latency does not
grow with the competitors' packet length.

## Departures from the original and open points

Not published, and chosen here:

- The bit split of the flit beyond the destination field.
- The channel handshake timing and reset. Reset is asynchronous and active
  high, named `rst`.
- The order within the two priority groups at reset.
- The depth of the network-interface FIFOs (4).
- The default weight table.

The original arbiter is described only by its rules. The matrix and the
ARB/XFER split are this design's way of meeting the stated two-clock latency
and two-clock throughput.

The combinational acknowledge chain between routers, described above, is a
consequence of that choice. A design that must run at high clock rates in
large meshes would register the link handshake instead. That needs a second
flit slot or credits per link to keep the rate at one flit per two clocks.

Routers with five to seven ports: `router` has a `PORT_MASK` parameter that
disables ports. `tb_router` checks a five-port instance alongside the
eight-port one. The mesh always builds eight-port routers.

The cores of the application SoC that used this network are not part of this
RTL. They would attach to the core ports.

## Files

| file | content |
|---|---|
| `rtl/rtsnoc_pkg.sv` | widths, `flit_t`, `addr_t`, port codes |
| `rtl/xy_route.sv` | routing controller (XY) |
| `rtl/wrr_arbiter.sv` | per-output weighted round-robin arbiter |
| `rtl/allocator.sv` | the eight arbiters, request/acknowledge wiring, turn restrictions |
| `rtl/crossbar.sv` | 8x8 one-hot multiplexer |
| `rtl/input_if.sv` | input channel and flow control (`o_wait`) |
| `rtl/output_if.sv` | single-flit output buffer |
| `rtl/router.sv` | eight-port router |
| `rtl/ni_fifo.sv` | network-interface FIFO |
| `rtl/rtsnoc_mesh.sv` | top: mesh, core placement, FIFOs, default weights |

Each block has a testbench `tb/tb_<block>.sv`. There are also two
network-level tests:

- `tb_fig2_priority`: the weighted-priority example.
- `tb_interleave_latency`: a short packet against long competitors.

`tb_rtsnoc_mesh` runs the default 24-core network twice:

- The reference latency experiment.
- 1500 random packets between all cores with random read stalls, checking
  that every flit arrives once, in order. It also counts that interleaving,
  weighted bursts, back-pressure, full FIFOs and XY turns each occurred.

## Simulating

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_rtsnoc_mesh \
        -Irtl -y rtl +libext+.sv rtl/rtsnoc_pkg.sv tb/tb_rtsnoc_mesh.sv -o sim
    ./obj_dir/sim

Replace `tb_rtsnoc_mesh` with any other testbench name. Every testbench ends
by printing `TB_RESULT checks=<n> failures=<m>`. All of them finish within
seconds, except `tb_interleave_latency`, which moves two 65536-flit packets
and takes about 20 s. `-Wno-fatal` keeps the circular-logic warning described
above from stopping the build.
