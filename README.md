# Venice: a circuit-switched network of flash chips

In a conventional SSD each flash controller owns one shared channel (bus) and
the chips hung on it. Two requests to different chips on the same channel
still wait for each other, because they share the one wire. This design
replaces the channels with a small 2D mesh: every flash chip gets a tiny router
chip beside it, the routers are joined by 8-bit links, and each flash
controller is attached to the edge of one row. Before a controller sends a
command, it sends a two-byte **scout packet** that finds and reserves a whole
free path through the mesh to the target chip. Once the path is reserved, the
command and the data cross it with no further arbitration, one register per
router (circuit switching). Two transfers never share a link, so they never
wait for each other in mid-flight. If no path is free, the scout packet
returns cancelled and the controller tries again.

The RTL here implements the routers, the mesh, the controller-side path
engine and the request dispatch at the default size of 8 x 8 flash nodes with
8 flash controllers. The flash chips themselves are commodity parts; they are
represented by their 8-bit I/O bus at the top level and by a behavioural model
in the testbenches.

## Geometry and port numbering

- Node (row, col) holds flash chip `row*NC + col`. Row 0 is at the top.
- Each router has four mesh ports, coded as in the scout packet: `00` RIGHT
  (col+1), `01` UP (row-1), `10` DOWN (row+1), `11` LEFT (col-1).
- Flash controller `r` is wired to the LEFT port of router (r, 0).
- Port `p` of one router faces port `3-p` of its neighbour. Mesh ports at the
  array edge are tied off (idle input, not ready).

## The scout packet

Two 8-bit flits, header first:

| flit   | bit 7         | bit 6                  | bits 5..0                         |
|--------|---------------|------------------------|-----------------------------------|
| header | 0             | 1 reserve / 0 cancel   | destination chip ID (6 bits)      |
| tail   | 1             | 1 reserve / 0 cancel   | controller ID (bits 5..3), 3 spare |

The controller ID is also the packet ID: each controller has at most one
scout packet in flight, so the ID names the path uniquely in every router.

## Link channel

Each direction of a link carries one `flit_t {vld, scout, data[7:0]}` per
cycle plus a ready bit going back. `scout=1` marks a scout flit; `scout=0` a
circuit byte (command or data). The ready bit means "my two-flit input buffer
on this port is empty". A sender starts a scout packet only when it sees it
high, then sends header and tail on two consecutive cycles. Circuit bytes
ignore the ready bit: a reserved circuit has no back-pressure.

## Router: the reservation table

Each router keeps a small table of rows `{packet ID, entry port, exit port,
valid}` (`venice_rsv_table`, 4 rows). A row joins two mesh ports for one
packet. A row whose exit equals its entry joins that port to the local flash
chip (the chip port). A port can belong to at most one row, which is what
makes the paths conflict-free. The crossbar (`venice_crossbar`) reads the table
each cycle and forwards circuit bytes both ways along every valid row, with
one register stage.

## Router: what it does with a scout packet

The router takes one buffered packet at a time, round-robin over its ports,
and looks it up by (packet ID, arrival port). There are four cases.

1. **Reserve mode, no row yet: a new hop.**
   - At the destination node, if the chip port is free, it is reserved. The
     packet is turned round, still in reserve mode: this is the confirmation.
   - At the destination node, if the chip port is held, the packet is sent
     back in cancel mode.
   - Elsewhere, the routing function (below) picks a free output port. The
     router writes a row {ID, arrival, chosen} and forwards the packet.
   - If no port is free, it is sent back out of its arrival port in cancel
     mode (a backtrack).
2. **Reserve mode, arriving on a row's exit port: the confirmation going
   home.** It leaves by the row's entry port. When it reaches the controller,
   every router on the path holds its row.
3. **Cancel mode, arriving on a row's exit port: a backtrack from
   downstream.** The row is removed. The routing function is re-run as if the
   packet had just arrived on the row's entry port. Ports this packet has
   already reserved here in this attempt are excluded (the *tried mask*). So
   the packet either takes a new port or backtracks further.
4. **Cancel mode, arriving on a row's entry port: release.** The row is
   removed and the packet follows the old exit port. At the chip-port row it
   is dropped. The controller sends this after its transfer, so the release
   sweeps the whole path.

### Routing function (`venice_route_compute`)

- If the router is the destination: eject.
- Otherwise, list the free ports that bring the packet closer (horizontal
  first, then vertical). With two, a 2-bit LFSR picks one; with one, take it.
- Otherwise, misroute. List the free ports other than the arrival port in the
  order Up, Down, Right, Left, and take entry `lfsr mod count`.
- If that list is empty too: backtrack.

"Free" means: the port exists, is in no row, is not in the tried mask, is not
the arrival port, and is not the input of another packet waiting in this
router.

### Why this terminates

The tried mask means each output port of each router is reserved at most
once per attempt. The number of reservations an attempt can make is therefore
bounded by the number of links. Each attempt ends either with a confirmation
or with the packet back at its controller in cancel mode. The mask is
cleared by a one-cycle `attempt_clr` broadcast from the controller when it
launches a new attempt.

### Avoiding races between neighbours

Two adjacent routers could try to reserve the same link towards each other
in the same cycle. Here a router makes decisions only on cycles whose parity
equals `(row + col) mod 2`. Neighbours have opposite parity, so they never
decide in the same cycle. When a decision is made, the link's far-side input
buffer is already known to be empty. The cost is that a router decides at
most every other cycle. A scout hop takes 3 to 4 cycles.

## Flash controller path engine (`venice_fc`)

One engine per controller, driven by a host-side request
`{write, dest, addr[23:0], len[15:0]}`:

1. Launch a scout packet in reserve mode (pulses `attempt_clr`).
2. Wait for it to come back. If it comes back in cancel mode, go to 1 at
   once. The number of launches is reported in `tries`.
3. Send six command bytes over the circuit: opcode (`01` read, `02` write),
   page address (3 bytes, high first), byte count (2 bytes, high first).
4. For a write, stream `len` bytes from `wdata` (valid/ready). For a read,
   pass `len` bytes arriving from the chip to `rdata` (valid only).
5. Send the scout packet in cancel mode along the path to release it, then
   pulse `done`.

The path is held for the whole transfer, including the chip's read time.

## Choosing a controller (`venice_fc_select`) and the top (`venice_ssd`)

A new request goes to the controller of the target chip's own row if it is
idle. Otherwise it goes to the idle controller with the nearest row (ties go
to the lower index). `req_rdy` is low while all controllers are busy.
`req_fc` tells which controller took the request; that controller's data
streams, `done` and `tries` belong to it. Each router also exports event
strobes (`rt_ev`) used by the testbenches to count mechanisms.

Top-level ports, all plain:

| port | dir | meaning |
|------|-----|---------|
| `req_vld`, `req_rdy`, `req`, `req_fc` | in/out | request handshake and chosen controller |
| `fc_wdata[NR]`, `fc_wdata_vld`, `fc_wdata_rdy` | in/out | write data per controller |
| `fc_rdata[NR]`, `fc_rdata_vld` | out | read data per controller |
| `fc_done`, `fc_tries[NR]` | out | completion pulse, scout packets used |
| `chip_out[NR*NC]`, `chip_in[NR*NC]` | out/in | 8-bit I/O bus of each flash chip (`flit_t`, `scout=0`) |
| `rt_ev[NR*NC]` | out | per-router event strobes |

## Timing

- A circuit byte crosses `d` routers in `d` cycles and bytes follow
  back to back. A transfer of `S` bytes over `d` routers therefore takes
  `d + S` cycles of 1 ns links, matching the usual
  (distance + size/width) x link-latency model of circuit switching.
- The end-to-end test checks this: a 64-byte read from chip 5 (row 0,
  column 5) reaches controller 0 six cycles after the chip sends it. The
  bytes arrive on 64 consecutive cycles.
- Path set-up costs 3 to 4 cycles per hop each way, plus retries under load.

## Where this design departs from, or adds to, the published scheme

- The UP/DOWN sense follows the published routing figure (UP = row-1). The
  published pseudo-code's vertical difference sign reads the other way; the
  figure was taken as the reference.
- Chip-port reservation is a row with exit == entry. The published 2-bit
  port codes only name the four mesh ports.
- The tried mask, its clearing broadcast, and the parity rule are this
  design's concrete way of getting the published livelock bound and avoiding
  two-sided claims of one link.
- The command byte format, the 24-bit page address, the 16-bit byte count,
  holding the path through the chip's read time, and release by a
  cancel-mode packet are this design's choices.
- The number of reservation rows (4) is a choice. At most two can be valid
  at once, because each port belongs to at most one row.
- Not included: the flash chips themselves, ECC and data randomisation in
  the controllers, SSD firmware (address mapping, garbage collection), the
  host interface, and the router's pads and package.

## Sizes

- `NR` rows (= controllers) and `NC` columns are parameters of `venice_ssd`,
  `venice_mesh` and the router; `DEPTH` sets the number of table rows.
- The packet format limits the array to 64 chips (6-bit chip ID) and 8
  controllers (3-bit packet ID). The top asserts `NR <= 8` and
  `NR*NC <= 64`.
- A 4 x 16 array fits these limits.
- A 16 x 4 array (16 controllers) would need `PID_W = 4` and a different
  tail flit.

## Files

- `rtl/venice_pkg.sv`: flit, table-row, request and event types; packet
  field helpers.
- `rtl/venice_lfsr2.sv`, `venice_route_compute.sv`, `venice_rsv_table.sv`,
  `venice_in_buf.sv`, `venice_crossbar.sv`: router parts.
- `rtl/venice_router.sv`: one router.
- `rtl/venice_mesh.sv`: the array of routers.
- `rtl/venice_fc.sv`, `venice_fc_select.sv`: controller side.
- `rtl/venice_ssd.sv`: the top.
- `tb/tb_<module>.sv`: a self-checking testbench for each module. Each prints
  `TB_RESULT checks=N failures=M`.
- `tb/flash_chip_model.sv`: behavioural flash chip (command parse, page
  store, tR/tPROG wait) for the end-to-end test.

## Simulating

With Verilator 5 (timing support needed for the testbenches):

```
verilator --binary --timing --assert -Irtl rtl/venice_pkg.sv rtl/*.sv \
    tb/flash_chip_model.sv tb/tb_venice_ssd.sv --top-module tb_venice_ssd
./obj_dir/Vtb_venice_ssd
```

Replace `tb_venice_ssd` with any other `tb_venice_*` to run a unit test
(`flash_chip_model.sv` is only needed by the end-to-end test).

The end-to-end test runs the default 8 x 8 array with 4 KB pages,
tR = 3 us and tPROG = 100 us at 1 GHz. It has three phases:

1. An idle-array read, with latency checks.
2. A hot spot on row 0, where several requests target the same chip.
3. 48 random page writes from all controllers, then reads of all of them
   and of unwritten pages. Every byte is compared.

It fails if any of these mechanisms never occurs: minimal hop, misroute,
backtrack, re-route, chip port held, confirmation, release, controller
retry, a non-nearest controller being used, or all controllers being busy.
It takes about 10 s of simulation after a roughly one-minute build.
