# WISHBONE network adapters for a source-routed mesh network-on-chip

This is synthesizable SystemVerilog for a small network-on-chip (NoC) that
connects WISHBONE IP cores. The cores may run in different clock domains.
Each core sits behind a **network adapter**:

- a *master adapter* looks like a WISHBONE slave to a processor-like core.
  It turns each bus cycle into a request packet.
- a *slave adapter* turns request packets back into WISHBONE cycles on a
  memory or peripheral. For a read, it sends the data back in a response
  packet.

The network is a mesh of five-port routers. The links between routers, and
between a router and its adapter, use a four-phase request/acknowledge
handshake. This handshake works whatever the speed of either end. Routing
is *source routing*: the master adapter looks up a complete route, and the
routers only read the bits that the route sets aside for them.

The design follows the structure of a published design that put WISHBONE
adapters on an asynchronous NoC prototyped on an FPGA. There, the network
side is self-timed. Here it is a set of clocked handshake controllers. The
last sections list the choices this RTL makes where that description is
silent, and where it departs from it.

## The network

### Topology

`wb_noc_top` builds a `ROWS x COLS` mesh. The default is 3 x 3. Node `n`
sits at row `n / COLS` and column `n % COLS`. Row 0 is the north side and
column 0 the west side. Every node has one `router`. Its local port is
connected to a `wb_master_na` where bit `n` of `MASTER_MASK` is 1, and to
a `wb_slave_na` elsewhere. By default, nodes 0 and 8 are masters and nodes
1 to 7 are slaves.

The WISHBONE port of every adapter is a top-level port. The port arrays are
indexed by node number. Entries for the other kind of adapter are unused
and tied low. Router ports on the edge of the mesh receive nothing. Any
flit sent off the edge is acknowledged and lost.

### Links

A link carries one flit at a time on these wires:

| wire | direction | meaning |
|---|---|---|
| `data` (32) | forward | the flit, bundled with the request |
| `rh` | forward | request: this flit is a packet header |
| `ri` | forward | request: this flit is an inner flit |
| `re` | forward | request: this flit ends the packet |
| `ack` | backward | acknowledge |

The sender makes the data stable, then raises exactly one of `rh`, `ri` or
`re`. The receiver takes the flit and raises `ack`. The sender then lowers
its request, and the receiver lowers `ack` (return to zero). `link_tx` and
`link_rx` implement the two ends and turn the link into a valid/ready
stream inside a router or adapter. On one clock, a flit takes at least
four clock cycles per link.

### Source routes and the way back

A header flit is a 32-bit route made of sixteen 2-bit fields. Each router
uses the lowest field:

- codes 0, 1, 2 and 3 mean north, east, south and west.
- on a compass input, the code of that same input means *local output*. A
  packet never turns back the way it came, so that code is free for this
  use.
- on the local input, the code simply names the compass output.

Before passing the header on, the router shifts it right by two bits and
puts a **return code** into the top two bits:

- for a compass input, the return code is the input's own code.
- for the local input, it is the code of the output taken.

When the packet reaches its destination, the top fields hold the way back,
last hop first. The slave adapter reverses the order of the sixteen fields
(`noc_pkg::reverse_route`). The result is a correct route from the slave
back to the master, ending with the master router's local-port code.
Nothing else in the network needs to know where a packet came from.

For example, a route from node 0 to node 1 is `E` then `W`:

- `E` takes the packet out of router 0's east port.
- at router 1, `W` equals the input's own code, so the packet goes to the
  local output.

At the slave, the two top fields hold `W` and `E`. Reversed, they form the
route back.

`noc_pkg::xy_route` computes dimension-ordered routes (X first, then Y).
`wb_noc_top` uses it at elaboration to fill each master's 16-entry route
table.

### Router

`router` has five identical port slices and follows the textbook layout:

```
link_rx -> router_fifo -> router_input_port --+
                                              | crossbar (request/grant/ready matrices)
link_tx <- router_fifo <- router_output_port <-+   (mutex + merge per output)
```

- The **input port** decodes and rewrites the header. It then raises a
  request to one output, and forwards the packet's flits until the end
  flit has passed.
- The **output port** contains a `mutex`. The mutex grants the output to
  one input and keeps the grant until that input lowers its request after
  the end flit. Whole packets therefore never interleave.
- The **merge** then passes the owner's flits to the output FIFO. It
  returns the FIFO's `ready` to the owner only.
- Simultaneous requests are served in round-robin order.
- The FIFOs hold 4 flits (`FIFO_DEPTH`).

An idle router takes 7 network clocks from a header's request on the input
link to its request on the output link.

### Congestion means loss

The network has no flow control of its own. If a header asks for an output
that another packet owns, the input port reads the whole packet and
discards it. It also pulses `drop_o`. The top brings out these pulses for
each router and port. Delivery is the end points' business.

For users, this has two consequences:

- **Writes are posted.** The master adapter acknowledges a write once the
  packet has left. A dropped write is lost silently.
- **A read waits for its response.** If the request or the response is
  dropped, the master adapter waits forever. No timeout or retry is built
  in, and none is described.

In practice, a system must avoid two packets meeting at one output:
schedule the traffic, or give masters disjoint paths. Otherwise it must
add end-to-end acknowledgement packets above this layer. In the
end-to-end test, both masters post 12 writes to the centre node at once.
About half of them are dropped, which shows how strict the rule is.

## Packets

| packet | flit 0 (rh) | flit 1 | flit 2 | flit 3 (re) |
|---|---|---|---|---|
| read request | route | control | address (re) | – |
| write request | route | control | address | data |
| response | route back | control (status) | data (re) | – |

The control flit (`noc_pkg::ctrl_flit_t`) holds these fields:

- the packet type;
- the write enable;
- the four byte selects;
- for a response, which of ack, err or rty ended the slave's cycle.

Only reads are answered.

## Master adapter (`wb_master_na`)

The adapter has four parts:

- `wb_master_transfer_unit` and `wb_master_receive_unit` form the core
  interface, on the core clock `clk_i`.
- `async_transmitter` and `async_receive` form the network interface, on
  `net_clk`.
- Two `synchronizer`s bring the transmitter's `tx_ack` and the receiver's
  `rx_req` into the `clk_i` domain.
- The two handshakes in the other direction (`transmit_req` and `rx_ack`)
  are synchronized inside the network-side units.

### Transfer unit controller

| state | what it does | leaves when |
|---|---|---|
| WAIT | idle | `wb_cyc_i && wb_stb_i` |
| STORE | registers address, data, `we`, `sel` | next clock |
| LOOKUP | route = `ROUTE_LUT[adr[31:28]]` | next clock |
| REQ | `transmit_req` high; for a read also `read_cmd_req` | `tx_ack_s` and (write, or `read_cmd_done`) |
| ACK | `transmit_req` low; WISHBONE cycle ended in its first clock | `!tx_ack_s` and (write, or `!read_cmd_done`) |

`transmit_req` therefore rises exactly three clocks after the strobe is
seen. For a read, `transmit_req` stays high, with `tx_ack` answered, until
the response has come back. The receive unit registers the response and
raises `read_cmd_done`. The transfer unit then ends the cycle:

- with `wb_ack_o` and `wb_dat_o`;
- with `wb_err_o` or `wb_rty_o` if the slave ended its cycle that way.

The termination lasts one clock.

### Receive unit controller

| state | what it does | leaves when |
|---|---|---|
| WAIT | idle | `rx_req_s`; the response is registered |
| STORE | `read_cmd_done` high | `!read_cmd_req` |
| ACK | `rx_ack` high | `!rx_req_s` (and `!read_cmd_done`) |

A packet that arrives when no read is pending passes straight through
STORE and is discarded.

### Timing

The end-to-end test runs the mesh with a 40 ns `clk_i` (25 MHz) and a
12 ns `net_clk`, talking to a neighbouring node. There, a write is
acknowledged 15 `clk_i` cycles after its strobe, and a read in 31 to 35
`clk_i` cycles (the slave memory adds 1 to 4 wait states). Most of that
time goes into the four-phase handshakes: at least four `net_clk` cycles
per flit per link, plus about 7 per router.

## Slave adapter (`wb_slave_na`)

The slave adapter has the same structure as the master adapter, with two
different controllers.

`wb_slave_receive_unit` works as follows:

1. It waits for a packet and registers its flits.
2. It runs one WISHBONE classic cycle on the slave, until ack, err or rty.
3. For a read, it raises `read_cmd_req` with the reversed header, and waits
   for `read_cmd_done`.
4. It acknowledges the receiver.

`wb_slave_transfer_unit` works as follows:

1. It registers the slave's data and status whenever the slave ends a
   cycle.
2. It sends the response packet.
3. It answers with `read_cmd_done`.

## Clock domains

Every handshake is four-phase with bundled data. The data is registered
and stable before its request and while the request is high. Crossing
between `clk_i` and `net_clk` therefore needs only a two-flop synchronizer
on each request or acknowledge wire. The data needs none. Any ratio of the
two clocks works. The tests use 10 ns against 7 ns, 10 ns against 6 ns,
and, for the whole mesh, 40 ns (25 MHz) against 12 ns.

All routers share `net_clk`. Each core-side half could have its own clock,
but the top gives all of them `clk_i`. To give cores separate clocks, split
the `clk_i` port.

## Parameters

| parameter | where | default | notes |
|---|---|---|---|
| `ROWS`, `COLS` | `wb_noc_top` | 3, 3 | mesh size |
| `MASTER_MASK` | `wb_noc_top` | nodes 0 and 8 | 1 = master adapter |
| `FIFO_DEPTH` | `wb_noc_top`, `router` | 4 | flits per port FIFO |
| `ROUTE_LUT` | `wb_master_na`, `wb_master_transfer_unit` | all 0 | 16 route headers, indexed by `adr[31:28]` |
| `STAGES` | `synchronizer` | 2 | flip-flops per synchronizer |
| `N` | `mutex` | 5 | requesters |

The flit and WISHBONE widths are 32 bits and are set in `noc_pkg`.

Address map of the top: bits 31:28 give a slave number `s`. It selects the
`(s mod number-of-slaves)`-th slave node in node order. Any bits below 28
are passed to the slave unchanged.

## How this relates to the published design

These parts follow the published description:

- the 3 x 3 mesh;
- five-port routers built from FIFOs, input ports, output ports, a
  crossbar, merges and mutexes;
- source routing with two bits per router, and the same-port code for the
  local output;
- dropping on congestion;
- the partition of both adapters into units, with the unit and signal
  names;
- the master transfer and receive controllers, state by state;
- the route index from the top four address bits, and the one-clock
  look-up;
- two synchronizers per adapter;
- basic single reads and writes only.

These are this design's own choices:

- a clocked network side (`net_clk`) instead of self-timed circuits;
- the meaning of the `rh`/`ri`/`re` wires;
- the flit order, control-flit fields and 32-bit flit width;
- the direction codes, and the header rewrite that yields the route back;
- dropping exactly when the wanted output is owned;
- round-robin choice inside the mutex;
- FIFO depth 4;
- the slave-side controllers;
- err/rty handling and its generation in the master transfer unit (the
  published block diagram draws those outputs on the receive unit);
- one-clock WISHBONE termination;
- which nodes are masters, the address map, and XY routes;
- synchronous active-high reset.

Not built:

- the torus variant;
- the FPGA clock manager that makes 25 MHz from 50 MHz;
- the IP cores themselves.

The published FPGA resource figures (about 100 slices per adapter) are not
reproduced. This RTL stores whole 32-bit flits in several places, so it
has more flip-flops: about 210 in a master adapter and 300 in a slave
adapter.

## Files

- `rtl/noc_pkg.sv`: shared types (`link_fwd_t`, `flit_t`, `ctrl_flit_t`,
  `route_lut_t`), constants, `xy_route`, `reverse_route`.
- `rtl/link_rx.sv`, `rtl/link_tx.sv`: the two ends of a four-phase link.
- `rtl/router_fifo.sv`, `rtl/mutex.sv`, `rtl/router_input_port.sv`,
  `rtl/router_output_port.sv`, `rtl/router.sv`: the router.
- `rtl/synchronizer.sv`, `rtl/async_transmitter.sv`,
  `rtl/async_receive.sv`: the network interface of an adapter.
- `rtl/wb_master_transfer_unit.sv`, `rtl/wb_master_receive_unit.sv`,
  `rtl/wb_master_na.sv`: the master adapter.
- `rtl/wb_slave_receive_unit.sv`, `rtl/wb_slave_transfer_unit.sv`,
  `rtl/wb_slave_na.sv`: the slave adapter.
- `rtl/wb_noc_top.sv`: the mesh.
- `tb/tb_<module>.sv`: a self-checking testbench per module.
- `tb/tb_link_src.sv`, `tb/tb_link_sink.sv`, `tb/tb_wb_mem.sv`:
  behavioural link ends and a WISHBONE memory, used by the testbenches.

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog. For example, with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    -Irtl -Itb -y rtl -y tb rtl/noc_pkg.sv tb/tb_wb_noc_top.sv \
    --top-module tb_wb_noc_top
./obj_dir/Vtb_wb_noc_top
```

Replace `tb_wb_noc_top` with any other `tb_<module>`.

`tb_wb_noc_top` runs the default 3 x 3 mesh end to end:

- every master/slave pair and every route-table entry;
- err and rty answers;
- parallel reads on disjoint paths;
- colliding posted writes, where it checks that the number of lost writes
  equals the number of drops reported.

It counts each of these mechanisms and fails if one never happened. The
simulation takes under a minute.

The testbenches use only two-state values and `$urandom`. They also run on
simulators without four-state support or a constraint solver.
