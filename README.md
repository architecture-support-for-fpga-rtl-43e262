# A bufferless NoC shell for sharing one FPGA among several cloud tenants

A cloud FPGA is normally rented whole to a single tenant, even when that
tenant's accelerator fills a fraction of the device. This design divides the
device into *virtual regions* (VRs). Each VR is a rectangle of fabric that is
partially reconfigured with one tenant's logic. A small on-chip network joins
the VRs. It lets one tenant's accelerators stream to each other, and it keeps
every tenant's traffic out of every other tenant's region.

The network is built to cost as little fabric as possible and to run fast:

* **Routers work in one dimension.** Routers stand in a column, each with
  one VR on its West side and one on its East side. A packet either moves up
  or down the column, or leaves toward one of the two VRs of its router.
  So a router has at most four ports (West, East, North, South). The two
  routers at the ends of the column lose one port and are built as 3-port
  routers.
* **Routers have no buffers.** Outgoing packets wait in a FIFO inside the
  sending VR. The router pulls a packet only when the output it needs is
  free.
* **The crossbar is reduced.** A packet never leaves by the port it came
  in on. Each output line therefore selects among the other n-1 inputs:
  three in a 4-port router, two in a 3-port one.
* **Adjacent regions have direct links.** VRs that sit one above the other
  are also wired to each other. Two halves of one tenant's design can then
  stream a word every clock without using a router.

The RTL builds the *single-column* arrangement with the default size of its
example deployment: three routers (3-port, 4-port, 3-port), six VRs and
32-bit payloads.

```
            VR4 ── R2 ── VR5        R2: 3-port (W, E, S)
             │      │      │
            VR2 ── R1 ── VR3        R1: 4-port (W, E, N, S)
             │      │      │
            VR0 ── R0 ── VR1        R0: 3-port (W, E, N)

   ── router port      │ between routers: router link
                       │ between VRs:     direct link (one each way)
```

VR `v` is attached to router `v/2`: on the West port (VR_ID 0) for even `v`,
on the East port (VR_ID 1) for odd `v`.

## Packets

Every packet is one flit: a 16-bit header followed by a `DATA_W`-bit
payload. With the default 32-bit payload, the flit is 48 bits.

| bits (DATA_W = 32) | field     | width | meaning                                      |
|--------------------|-----------|-------|----------------------------------------------|
| 47:38              | VI_ID     | 10    | virtual instance (tenant) that sent it       |
| 37                 | VR_ID     | 1     | 0 = West VR, 1 = East VR of the destination  |
| 36:32              | ROUTER_ID | 5     | destination router                           |
| 31:0               | payload   | 32    | tenant data                                  |

`noc_pkg::hdr_t` is this header as a packed struct.

The fields are in the published order and widths. Putting VI_ID at the most
significant end is a choice of this design. Routing looks only at ROUTER_ID
and VR_ID. VI_ID is checked when the packet arrives.

## Routing

`noc_route_compute` makes the routing decision. It is combinational:

```
dst ROUTER_ID >  own ROUTER_ID  -> North
dst ROUTER_ID <  own ROUTER_ID  -> South
equal, VR_ID == 0               -> West
equal, VR_ID == 1               -> East
```

There is no deflection. A packet crosses exactly |dst − src| + 1 routers.
Router IDs grow from South to North.

This follows the routing pseudo-code of the original description. Its prose
states the comparison the other way round ("if the current ROUTER_ID is
greater than that of the packet, push up"). The two cannot both hold. The
pseudo-code was followed.

## The pull handshake and the allocator

Understanding this part explains most of the timing.

Every source of packets looks to the router like the read side of a
first-word-fall-through FIFO. A source is either the FIFO in a VR or the
output register of the neighbouring router. It shows three signals:

* `EMPTY`, low while a packet is waiting;
* the head packet itself, on `flit`;
* `RD_EN`, which the router drives high for one cycle to take the head.
  The next packet, if any, is shown in the following cycle.

The handshake has three steps:

1. The source lowers `EMPTY`.
2. The allocator of the output that the head packet needs raises `RD_EN`,
   once its crossbar line can accept a packet.
3. In the same clock edge, the packet is copied into the crossbar.

The router holds no packet that it has not already granted.

Each output line has one `noc_allocator`. Its requests are the other ports
whose head packet is routed to this output. When several request at once,
`alloc_encoder` picks one, starting its search at a counter register. The
counter then moves to the port just after the granted one. For two requests,
this gives the published encoder table:

| requests | STEP | SELECT                 |
|----------|------|------------------------|
| 00       | –    | none                   |
| 01       | 0    | 1                      |
| 10       | 0    | 0                      |
| 11       | 1    | alternates 0, 1, 0, …  |

For three requests, simultaneous packets from ports 1, 2 and 3 leave in the
order 1, 2, 3. The next wave again leaves 1, 2, 3. This is the published
example of a 4-port router, and `tb_noc_router` checks it cycle by cycle.

The published block diagram adds a "step" register to the counter instead.
Exactly how the two combine is not given. Moving the counter on every grant
is the simplest rule that reproduces both the table and the example.

## Crossbar pipeline and timing

Each crossbar output line is a two-stage pipeline:

* a first register `s1`;
* the output register `s2`, whose contents are the router's `out_flit`.

A stage moves forward when the stage after it is free or is emptied in the
same edge. The allocator may load a line whenever `s1` is free or is moving
on. The consumer empties `s2` with its own `RD_EN`:

* a VR always takes what arrives;
* a neighbouring router takes the packet only when its allocator grants it.
  Until then, this router's line stalls, and so does the source behind it.

Measured timing with no contention, in clock cycles from the cycle `t` in
which a payload is accepted on the tenant's AXI4-Stream port:

| event                                          | cycle       |
|------------------------------------------------|-------------|
| packet at the head of the VR's FIFO            | t+2         |
| packet leaves the first router                 | t+4         |
| each further router                            | +2          |
| payload on the destination VR's `user_rx`      | +1 after the last router |
| same router, West to East (or back)            | **t+5**     |
| one router hop away                            | **t+7**     |

After the first packet, a stream arrives at one payload per clock. At the
default 32-bit width, that is 32 bits × f_clk. The quoted 25.6 Gbit/s between
two accelerators therefore needs an 800 MHz NoC clock.

## Inside a virtual region

`virtual_region` is the part of a VR that the provider owns. The tenant's
logic, the USER REGION, sits outside it and sees only payloads.

* **`vr_config_regs`** hold three registers that the hypervisor writes
  when it places a design in the VR:

  | address | register  | meaning                           |
  |---------|-----------|-----------------------------------|
  | 0       | ROUTER_ID | where this VR's packets go        |
  | 1       | VR_ID     | West or East VR on that router    |
  | 2       | VI_ID     | the tenant that owns this VR      |

  The write port (`cfg_we`, `cfg_addr`, `cfg_wdata[15:0]`) is this design's
  own. At the top level, `cfg_vr` selects the VR.
* **`vr_wrapper`** puts the header in front of each outgoing payload. The
  header comes from the registers, so a tenant can neither forge its VI nor
  choose a destination that the hypervisor did not set up. It is an
  AXI4-Stream register stage with full throughput.
* **`vr_interface`** is an AXI4-Stream slave that writes into a FIFO
  (`sync_fifo`, depth `FIFO_DEPTH` = 8). The router reads the FIFO through
  the pull handshake. When the FIFO is full, `tready` drops and the tenant's
  logic stalls. No packet is ever lost in the network.
* **`access_monitor`** receives what the router delivers. It compares the
  packet's VI_ID with the VR's VI_ID register:
  * on a match, it removes the header and passes the payload to the user
    region (`user_rx_valid`, `user_rx_data`);
  * otherwise, it discards the packet and pulses `user_rx_drop`.

  It takes one register stage.

Because the routers never refuse a packet at a VR output, a tenant's receive
side must accept one payload per clock. No back-pressure reaches the
network from a VR's input.

Moving a region to another tenant is a matter of register writes. After
VI_ID is rewritten, the region accepts the new tenant's packets and drops
the old tenant's. The end-to-end test does this in the middle of a run.

## Direct links between neighbouring regions

`vr_direct_link` joins two VRs that sit one above the other on the same side
of the column. There is one link in each direction. It is an AXI4-Stream
register stage: a word accepted in cycle t is offered in cycle t+1, and one
word moves per clock.

The original description says only that such links exist. It gives no
isolation rule for them. Here a link is open only while both regions hold
the same VI_ID. Otherwise, words are accepted and discarded, and `blocked`
is high. Without that rule, a direct link would be the one path between
tenants that bypasses the access monitors.

At the ends of the column, the top and bottom VRs keep their outward
direct-link ports so that the port arrays stay regular. Those ports'
outputs are constant 0.

## Top level: `mt_noc_top`

| parameter     | default | meaning                                         |
|---------------|---------|-------------------------------------------------|
| `DATA_W`      | 32      | payload width. The router study covers 32–256 bits. |
| `NUM_ROUTERS` | 3       | routers in the column. VRs = 2 × `NUM_ROUTERS`. At most 32, because ROUTER_ID has 5 bits. |
| `FIFO_DEPTH`  | 8       | depth of each VR's output FIFO (a power of 2)   |

The ports are packed arrays indexed by VR number. They connect to the parts
that lie outside the shell:

* tenant transmit: `user_tx_tdata`, `user_tx_tvalid`, `user_tx_tready`;
* tenant receive: `user_rx_valid`, `user_rx_data`, `user_rx_drop`;
* direct links to the region above (`dln_tx_*`) and below (`dls_tx_*`);
  the matching `dln_rx_*` and `dls_rx_*` receive from the region below and
  above;
* the hypervisor's register port: `cfg_*`.

One clock, `clk`, runs everything. The reset `rst_n` is active-low and
synchronous; every register resets to 0 or empty.

## Where this RTL departs from, or adds to, the original description

* **One clock domain.** The original text mentions that the buffers
  between VR and router also separate the VR and router clock domains. Here
  VR and router share one clock, and the FIFO is synchronous. A dual-clock
  FIFO in `vr_interface` would restore the separation. The receive path
  would then also need a crossing, which the original does not describe.
* **Routing direction.** The pseudo-code was followed over the prose (see
  Routing).
* **Allocator counter rule.** The counter moves past the granted port on
  every grant (see the allocator section).
* **Choices of this design.** The following were not specified and were
  chosen here:
  * the crossbar's two register stages and their place;
  * FIFO depth 8, and a first-word-fall-through FIFO;
  * the register map;
  * the access monitor's drop flag and register stage;
  * the VI check on direct links.
* **A VR cannot address itself.** The reduced crossbar has no path from a
  port back to itself. A packet whose header names its own sender's VR has
  no output, and it would stay at the head of the FIFO. The hypervisor must
  not configure that.
* **Traffic study.** `tb_router_traffic` repeats the latency and
  waiting-time study of a 3-port router. Each source is an unbounded queue
  that creates flits at random at 0.2, 0.4 or 0.6 flit per cycle.

  | case                 | rate | latency (cycles) | waiting (cycles) |
  |----------------------|------|------------------|------------------|
  | no collision         | any  | 2.00             | 0                |
  | collision, 2 → 1     | 0.2  | 2.15             | 0.15             |
  | collision, 2 → 1     | 0.4  | 2.86             | 0.86             |

  With collision at 0.6 per source, 1.2 flit per cycle is offered to a line
  that carries 1. The queue then grows for as long as traffic is injected.

  The original reports, at a rate of 0.6:
  * about 3 cycles of latency and 1.66 of waiting without collision;
  * about 5 and 3.9 with collision.

  Its traffic generator and its points of measurement are not described, so
  the numbers are not expected to match. What does match is the fixed
  two-cycle traversal, and waiting that grows with the load only under
  collision.
* **Not built:**
  * the *double-column* and *multi-column* arrangements, in which columns of
    routers are chained through wires at the device edge;
  * the tenants' accelerators;
  * the hypervisor software;
  * the I/O part of the shell that talks to the host.

  The top level brings out the ports where these would connect.

## Files

| file | contents |
|------|----------|
| `rtl/noc_pkg.sv` | header type, field widths, direction and register-address enums |
| `rtl/noc_route_compute.sv` | routing decision |
| `rtl/alloc_encoder.sv` | request encoder of one output line |
| `rtl/noc_allocator.sv` | allocator: encoder, counter, RD_EN generation |
| `rtl/noc_crossbar.sv` | reduced crossbar with two-stage output lines |
| `rtl/noc_router.sv` | 3- or 4-port router (`HAS_NORTH`, `HAS_SOUTH`) |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO |
| `rtl/vr_interface.sv` | AXI4-Stream to FIFO, read by the router |
| `rtl/vr_config_regs.sv` | ROUTER_ID, VR_ID, VI_ID registers |
| `rtl/vr_wrapper.sv` | header insertion |
| `rtl/access_monitor.sv` | VI filter and header removal |
| `rtl/virtual_region.sv` | the shell part of one VR |
| `rtl/vr_direct_link.sv` | VR-to-VR link |
| `rtl/mt_noc_top.sv` | single-column shell |

Each module has a self-checking testbench, `tb/tb_<module>.sv`.

* **`tb_noc_router`** covers a 4-port and a 3-port router. It includes the
  three-way collision example and the 2-cycle traversal.
* **`tb_mt_noc_top`** runs the whole shell at its default size. It is set
  up like a six-accelerator, five-tenant deployment and goes through:
  * a same-router stream;
  * packets dropped between tenants;
  * a region reassigned to another tenant, then used across two routers;
  * five senders colliding on one region, with stalled router links and
    full FIFOs;
  * open and blocked direct links.

  It counts each of these events and fails if one never happens.
* **`tb_mt_noc_column`** builds a taller column: six routers and twelve
  VRs. Over twelve rounds it reassigns destinations and tenants at random
  and sends random streams. It checks:
  * in-order delivery, or a drop, for every payload;
  * no payload faster than 5 + 2 × hops cycles;
  * traffic across the full five-hop length.
* **`tb_router_traffic`** is the traffic study above.
* **`tb_router_widths`** runs random traffic, with stalled North and South
  outputs, through 4-port routers with 32-, 64-, 128- and 256-bit payloads.
  It checks every bit of every flit, the order of the flits, and the
  two-cycle traversal.

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mt_noc_top \
    -Irtl -y rtl +libext+.sv rtl/noc_pkg.sv tb/tb_mt_noc_top.sv
./obj_dir/Vtb_mt_noc_top
```

`-y rtl` lets Verilator find each module in the file of the same name.
Replace the top module and the testbench file to run any other test. The
testbenches use only `$urandom`, so they also run in two-state simulators.
Each testbench builds and runs in seconds.
