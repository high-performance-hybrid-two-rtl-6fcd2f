# Hybrid two-layer NoC router for FPGAs

A packet-switched network-on-chip is flexible, but it is slow for cores that sit
close together and talk a lot. Every transfer pays for a request/grant handshake
in each router, and a 32-bit word has to be cut into 8-bit flits. This router
adds a second layer for that case. The router has four local IP ports and four
mesh ports (N, E, S, W), and it offers two layers:

* **P-layer (packet-switched).** 8-bit channels, dual-clock input buffers,
  XY routing and virtual cut-through. Every IP uses it to reach IPs on *other*
  routers.
* **C-layer (circuit-switched).** A 32-bit, unbuffered, time-multiplexed
  cross-point among the IPs of *one* router that take part in it. By default
  these are IP0 and IP3. A schedule memory sets the cross-point anew in every
  time slot. It can also send one word to several outputs at once (multicast).

Because traffic between local IPs now goes over the C-layer, the P-layer drops
all local-to-local connections. This shrinks its cross-point and its arbiter.
The network interface (NI) of each IP chooses the layer for every message on
its own. The IP only gives a target address.

```
           IP0 ─NI─┐   ┌─NI─ IP1             P-layer: 8 inputs x 8 outputs, 8 bit
                   │ N │                      directional outputs  8:1 mux
        W ──── [ P-layer router ] ──── E     local outputs        4:1 mux (N,E,S,W only)
                   │ S │                      C-layer: NC x NC, 32 bit, scheduled
           IP2 ─NI─┘   └─NI─ IP3             (IP0, IP3 also on the C-layer)
```

## Files

| file | contents |
|---|---|
| `rtl/noc_pkg.sv` | constants, port numbers, header layout, XY route function |
| `rtl/async_fifo.sv` | dual-clock input buffer (Gray-code pointers), free-space count |
| `rtl/input_port.sv` | header decode, XY route, request/grant, packet streaming, drop |
| `rtl/central_arbiter.sv` | one round-robin FSM per output, with the size check for virtual cut-through |
| `rtl/p_crosspoint.sv` | multiplexer cross-point of the P-layer, registered outputs |
| `rtl/c_schedule.sv` | C-layer schedule memory and slot counter |
| `rtl/c_crosspoint.sv` | C-layer 32-bit cross-point, multicast, per-input route vector |
| `rtl/network_interface.sv` | mode switch, packetising and de-packetising, receive buffer, C-layer send |
| `rtl/hybrid_router.sv` | both layers of one router |
| `rtl/mocres_node.sv` | one mesh node: router with its four NIs |
| `rtl/mocres_mesh.sv` | top: 2-D mesh of nodes |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `fig3_scenario_tb` |

## Packet format and sizes

A P-layer packet is a whole number of *units*. One unit is `BUF_DEPTH / 2**SIZE_W`
flits, which is 4 flits (one 32-bit word) with the defaults. The header takes the
first unit:

| flit | contents |
|---|---|
| H0 | destination `{x[2:0], y[2:0], local[1:0]}` |
| H1 | size code `s` (5 bits): the packet is `s+1` units long |
| H2 | source address, same layout as H0 |
| H3 | reserved, 0 |

Then come `s` payload words of 32 bits each, most significant byte first.
Because the size is a fraction of the buffer depth, a router can tell from H1
whether the buffer behind an output can hold the whole packet. The largest
packet (`s = 31`) fills an empty buffer exactly. The source field, the local
port field and the byte order are this design's choices. The paper asks only
for size, X and Y in the header.

## The P-layer, cycle by cycle

1. **Input buffer.** A sender writes a flit into the router's input buffer on
   the sender's own clock. This clock is the neighbour router's clock or the
   IP's clock. The write side also tells the sender how many entries are free.
   The write pointer reaches the router clock through a two-flop synchroniser
   (2 cycles).
2. **Input port.** The input port reads H0 and H1 (1 cycle each). It then works
   out the output by XY routing (X first, E = +X, N = +Y) and the packet length,
   and raises a request.
3. **Central arbiter.** There is one FSM per output, and all FSMs run in
   parallel. Requests for different outputs are granted in the same cycle. When
   several inputs want the same output, the FSM picks the next one after the
   input it granted last (round robin). It grants only once `out_free` behind
   the output is at least the packet length. This is virtual cut-through: once
   a packet starts, it never stops for lack of room downstream. The FSMs of the
   local outputs only know the four directional inputs.
4. **Cross-point and output register.** H0 goes out in the grant cycle. It
   reaches the output link one cycle later, and then one flit follows per
   cycle. The flit that ends the packet releases the output. After a release the
   FSM waits one idle cycle, so that the last flit is counted in the downstream
   free space before the next size check.

From the write of H0 into an empty buffer to H0 on the output link takes
**6 router cycles**. Add up to one cycle when the sender's clock is not aligned
with the router clock. The testbenches measure 6.7 to 6.8 cycles. A packet that
enters at a local port and is addressed to a local port of the same router
cannot be delivered in this layer. It is drained, and `drop` pulses. The NI
never produces such a packet.

## The C-layer

The schedule memory holds `NSLOT` (16) entries. For every C-layer output, an
entry holds an enable bit and the index of the C-layer input it listens to
(log2 NC bits). The slot counter steps through the first `sched_len` entries,
one per `c_clk` cycle, and then wraps. The cross-point is a set of
combinational 32-bit multiplexers, with no buffer and no handshake. A word
reaches its output(s) in the cycle it is sent. If two outputs name the same
input, the word is multicast.

The cross-point also gives each input a *route vector*: the set of outputs that
listen to it in the current slot. The NI of a C-layer IP takes a word from its
IP (`tx_ready`) only when the route vector includes the target's port. The
schedule therefore decides when words move, and a word is never lost. A C-layer
IP has to run on `c_clk`.

The schedule is written through `sched_we / sched_addr / sched_data`. Output
`o` of an entry sits at bits `[o*(CSEL_W+1) +: CSEL_W+1]` as `{enable, select}`.
C-layer port numbers follow the order of the local ports in `C_MASK`. With the
default `4'b1001`, IP0 is C-port 0 and IP3 is C-port 1.

## Network interface

* **Send.** The IP offers the first word of a message together with `tx_dst`
  and `tx_len` (1 to 31 words). The NI then checks the target:
  * On another router: the NI writes the 4-flit header and then 4 flits per
    word into the router's local input buffer. This takes 5 IP cycles per word.
  * On this router, with both IPs on the C-layer: the NI sends the words over
    the C-layer in the scheduled slots. `mode_c` is high while it does so.
  * On this router, without a C-layer path: the NI consumes the message and
    pulses `tx_err`.
* **Receive.** The router writes flits into a 128-flit dual-clock buffer in the
  NI. The NI removes the header and hands the words to the IP with valid/ready,
  together with `rx_src`, `rx_len`, `rx_first` and `rx_last`. C-layer words
  arrive on `c_rx` with no buffering.

## The mesh

`mocres_mesh` is the top. It places `MESH_X` by `MESH_Y` nodes (default 2x2).
Node (x, y) has index `y*MESH_X + x` and gets its coordinates through `my_x`
and `my_y`. Neighbours are wired point to point: the E output of (x, y) writes
the W input buffer of (x+1, y), and the N output of (x, y) writes the S input
buffer of (x, y+1). Links in the other direction are wired the same way. Each
input buffer is written on the sending node's clock and reports its free space
back to that node. Every node has its own P-layer and C-layer clock, so no two
routers need to share a clock. All IP and schedule signals come out as arrays
indexed by node, and by local port for the IPs.

## Parameters

| parameter | default | origin |
|---|---|---|
| P-layer channel width `FLIT_W` | 8 | paper |
| C-layer width `CW` | 32 | paper |
| local / directional ports | 4 / 4 | paper |
| cross-point select width | 3 | paper |
| C-layer IPs `C_MASK` | IP0, IP3 | paper |
| mesh size `MESH_X` x `MESH_Y` | 2 x 2 | own choice |
| buffer depth `DEPTH` | 128 flits | own choice (the paper gives none) |
| size code `SIZE_W` | 5 bits | own choice |
| schedule depth `NSLOT` | 16 slots | own choice |
| coordinates | 3 bits each (mesh up to 8x8) | own choice |

`C_MASK`, `DEPTH` and `NSLOT` are module parameters. The widths and port counts
are constants in `noc_pkg`.

## Where this differs from the source design, or goes beyond it

* The paper gives the router's structure, the arbiter's FSM organisation and
  the widths. It does not give the buffer, NI or handshake details, which come
  from an earlier router that is not described. Everything listed as "own
  choice" above, the request/grant signalling, the free-space flow control
  and the reset scheme are therefore this design's.
* There is one virtual channel per port. The paper lists virtual channels per
  port as a parameter of its model but does not describe a multi-channel
  router.
* The number of P-layer ports is fixed at 8. The paper also characterises
  routers with other port counts (its MC(x,y,z) instances), which this RTL
  cannot be set to.
* The published waveform shows 16-bit C-layer words and three C-layer ports
  (L0, L1, L3). This design follows the text: 32 bits, and IP0 and IP3. Three
  ports are available with `C_MASK = 4'b1011`.
* The mesh size is not given by the source design. `mocres_mesh` defaults to
  2x2, the smallest mesh that has two-hop routes. Ports at the mesh edge are
  left idle and report no room, so a packet addressed outside the mesh would
  wait forever.
* The input buffers read their array without a register (show-ahead). On an
  FPGA this maps to distributed RAM. A block-RAM version needs one more
  pipeline stage on the read side.
* Reset is asynchronous and active low, with one reset per clock domain. The
  reset must be released in a synchronised way in each domain.

## Verification

Each testbench checks its block against values it works out on its own and
prints `TB_RESULT checks=N failures=M`. The testbenches are:

* `async_fifo_tb`: capacity, order and free space across two unrelated clocks.
* `input_port_tb`: routes in all four directions, packet length, request
  timing, flit order with stalls, drop of local-to-local packets.
* `central_arbiter_tb`: grant timing, no local-to-local grants, parallel
  grants, round-robin order, cut-through wait, idle cycle after release.
* `p_crosspoint_tb`, `c_crosspoint_tb`, `c_schedule_tb`: random selects and
  schedules against a reference, multicast.
* `network_interface_tb`: header and byte order, receive path with
  back-pressure, C-layer sends only in open slots, refused messages.
* `hybrid_router_tb`: 320 random packets from all eight inputs on a foreign
  clock. It checks XY output, contents, no overflow behind any output, header
  latency, contention, cut-through waits, a drop and the C-layer slots.
* `mocres_mesh_tb` (top, default parameters): all 16 IPs of the 2x2 mesh
  send 8 messages each on unrelated clocks. Messages to other nodes take one
  or two hops. IP0 and IP3 alternate between P-layer messages and C-layer
  messages to each other. Every message is compared, in order, with what its
  source sent.
* `mocres_node_tb` (one node, default parameters): IP messages out through E, S
  and W, one of them held back by a full neighbour. It also checks neighbour
  packets delivered to IPs (two at once to IP0), C-layer messages both ways
  with a multicast slot, the NI's mode switch and a refused message.
* `fig3_scenario_tb`: the reference waveform's scenario. Five packets enter N,
  E, S, W and L2 together and leave S, L2, N, E and W in the same cycle. It
  also runs a three-port C-layer with a multicast slot.

To simulate with plain Verilator, for example the mesh:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/noc_pkg.sv \
          tb/mocres_mesh_tb.sv --top-module mocres_mesh_tb -o sim && obj_dir/sim
```

Every testbench runs in well under a minute.
