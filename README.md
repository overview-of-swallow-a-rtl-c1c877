# Swallow interconnect in SystemVerilog

Swallow is a 480-core experimental machine built to study how parallel programs
and operating systems scale, and how much energy they use. It avoids shared memory
altogether. Each 32-bit core has its own 64 kB single-cycle memory and no cache.
Cores cooperate only by sending messages over a network whose bandwidth is
generous compared with what the cores can inject. The cores come in dual-core
packages, eight packages to a circuit board (a *slice*, 16 cores), and slices are
cabled together into larger grids.

The processors and their memories are commercial parts. What makes Swallow a
system is the way those parts are joined:

- links that move 8-bit tokens over five wires;
- a wormhole switch beside every core;
- a package in which the two cores' switches share four fast on-die links;
- a grid wired as a two-layer *lattice*, not an ordinary mesh, with routing
  tables that make every node reachable from every other.

This RTL describes that network at the level of wires, tokens and routes. Every
core appears only as four token-level ports where its processor links would
connect.

## The lattice and how routes find their way

This is the part that is least obvious. A package has two cores, and each core
has its own switch. A package exposes only four external links. Two of them are
wired north and south, on core 0's switch. The other two are wired west and east,
on core 1's switch. Tiling packages in a grid therefore gives two interleaved
networks rather than one mesh:

- the *vertical layer*: all core-0 switches, connected in columns;
- the *horizontal layer*: all core-1 switches, connected in rows.

Inside every package, the two layers meet through four on-die links. A plain X-Y
routing scheme does not reach every node in this structure. A route has to
change layer (cross the on-die links) whenever it needs to turn.

Routing uses **dimension order, vertical first**. A packet at a horizontal-layer
node whose destination is in another row crosses to the vertical layer first. It
then travels north or south to the destination row, crosses back, travels west
or east, and crosses once more if the destination is a vertical-layer core.

Every switch routes by comparing the packet's 16-bit destination identifier with
its own identifier, bit by bit from the most significant end. The first bit that
differs selects the direction stored for that bit position (`route_lookup`). If
no bit differs, the packet has arrived and goes to the core. The switch knows
the value of its own bit, so one table entry per bit also encodes "above or
below". Suppose the identifiers first differ in a row bit that is 0 in the
switch's own identifier. Then the destination row is larger, so that entry says
south.

`swallow_top` packs identifiers as `{row, column, layer}`, with the row in the
higher bits. It fills each switch's table as follows:

| bit field | vertical-layer switch (core 0)      | horizontal-layer switch (core 1)  |
|-----------|-------------------------------------|-----------------------------------|
| row bits  | north if own bit is 1, else south   | cross to the other core           |
| column bits | cross to the other core           | west if own bit is 1, else east   |
| layer bit | cross to the other core             | cross to the other core           |

Because row bits come first, the vertical dimension is always resolved first.
Identifiers use 10 of the 16 bits at the default 12 × 20 package grid.

A route changes layer at most three times: from a horizontal-layer source to a
vertical-layer destination in another row and column. Between two
horizontal-layer nodes it changes layer at most twice.

## Packets, routes and channel switching

A packet is a stream of tokens. It has three parts:

1. a three-byte header: the destination node identifier (two bytes) and a
   channel-end byte;
2. any number of data tokens;
3. the `END` control token (`0x01` with the control flag set).

At each switch, the header opens a route. The switch reads the first two bytes,
looks up a direction, and waits for an output port of that direction that no
route holds. It then replays the two header bytes and streams every later token
straight through. The output stays reserved until `END` passes. A packet
therefore holds a chain of links across the network, which is wormhole routing.

A sender that never sends `END` keeps its chain forever. The result is a
dedicated circuit between two cores with no per-packet header cost, which is
what the paper calls channel switching.

Several ports can share one direction. The four on-die links are all
"internal". A new route takes the lowest-numbered free port of its direction, so
up to four routes cross between the cores of a package at once. The header is
delivered unchanged to the destination core, channel-end byte included.

Switch ports are numbered as follows:

| ports | use |
|-------|-----|
| 0–3   | processor links to this core (direction 0, local) |
| 4–7   | on-die links to the other core's switch (direction 1) |
| 8–11  | external links (XLinks); Swallow wires two of them |

Timing inside the switch:

- One route is granted per cycle, with waiting inputs taking turns.
- A header reaches a free output two cycles after its second byte entered.
- After that, a token passes in the cycle it is offered.

## Links: tokens on five wires

Each link direction is five wires. A token is four 2-bit symbols, most
significant first. Symbol *s* is sent by toggling wire *s*, so a byte costs four
wire transitions whatever its value. A control token also toggles wire 4 along
with its first symbol.

Symbols are `ts` cycles apart. The next token's first symbol follows the last
symbol after `tt` cycles, so one token takes `3*ts + tt` cycles. `ts` and `tt`
are run-time inputs, as on the real links:

| link | ts | tt | cycles per byte | rate at 500 MHz |
|------|----|----|-----------------|-----------------|
| on-die, fastest setting | 2 | 1 | 7  | 571 Mbit/s (the paper quotes 500) |
| package to package      | 8 | 8 | 32 | 125 Mbit/s |

Flow control is credit-based (`link_port`). Each receiving end has an 8-token
buffer.

- **After reset:** the receiving end grants its whole buffer to the far end with
  a credit token.
- **While running:** it grants space again in chunks of 4. A credit token is a
  control token `0xC`*n*, worth *n* tokens. It goes out ahead of any waiting
  data, and the far port consumes it; switches never see it.
- **Sending:** a sender spends one credit per token and stops (`credit_stall`)
  when it has none left.

The receiver registers the wires once. A token is available to the switch about
`3*ts + 2` cycles after the sender accepted it.

## Package and grid

`l2_package` holds two switches and 16 link ends: four on-die links, with a
`link_port` at each end, and four XLinks per switch. The processor links are
plain token streams with valid/ready handshakes. The package's ports take the
node identifiers, routing tables and XLink directions as inputs, because on the
real machine software sets them.

`swallow_top` builds a grid of `2*SLICES_X` × `4*SLICES_Y` packages. The default
is 6 × 5 slices, which gives 480 cores. All package-to-package links use one
timing setting, `ts_ext`/`tt_ext`. The top also brings out:

- links that would leave the grid, as `edge_n/s/w/e_tx/rx` (on the machine, an
  Ethernet bridge hangs on a south link);
- event outputs `ev_*`, which tell a testbench that a mechanism happened
  somewhere in the grid.

## What is not modelled

The following are not modelled, each for its own reason:

- **Not described in the paper:** the cores themselves (eight hardware threads,
  four-slot pipeline, channel ends) and their 64 kB memories are the vendor's
  design.
- **Outside the network:** the per-slice SDRAM, SPI and debug interfaces, and
  the Ethernet bridge.
- **Analog or board-level:** the energy-measurement board, power supplies and
  frequency scaling.

Every switch and link runs on one common clock. The real packages run from
separate clocks. There is no path to identifiers outside the grid, so packets
for the Ethernet bridge cannot be routed yet.

## Where this design makes its own choices

The paper gives the principles and the numbers used above:

- five wires per link direction;
- 2-bit symbols and 8-bit tokens;
- the `3*ts + tt` token time and the `ts = 2`, `tt = 1` fastest mode;
- 125 Mbit/s external links;
- three-byte headers and up to 2^16 nodes;
- longest-prefix routing;
- routes closed by a control token;
- new routes taking the next unused link of a direction;
- 12-ported switches with 4 + 4 + 4 links per switch;
- slices of 2 × 4 packages;
- vertical-first dimension-ordered routing.

The following are this design's own choices:

- **Encoding:** the symbol order; the use of wire 4 to mark control tokens; the
  control-token codes.
- **Flow control:** the buffer depth, the credit chunk and the credit-token
  format.
- **Switch behaviour:** the switch's cycle timing and arbitration.
- **Processor links:** token-level rather than five-wire.
- **Addressing:** the identifier layout and the grid shape (6 × 5 slices).

Four points in the paper do not agree with each other:

- **On-die rate.** The fastest link mode is said to give 500 Mbit/s, but its own
  token-time formula gives 7 cycles per byte (571 Mbit/s). The RTL follows the
  formula.
- **Layer transitions.** The paper says a route changes layer at most twice.
  Vertical-first routing needs three in one case, described above. The RTL
  follows the routing rule.
- **Processor-link rate.** The package drawing labels the processor links
  500 Mbit/s, but the text says a byte crosses the core's network interface in
  one 500 MHz cycle. Here the processor ports take one token per cycle per link,
  without a rate limit.
- **On-die link count.** The text calls the on-die connection "two internal
  links" with four times the external bandwidth, but the package drawing shows
  four 500 Mbit/s links. The RTL builds four.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

- `tb_link_tx`, `tb_link_rx`: token values, symbol spacing and the
  `3*ts + tt` period, decoded or encoded independently of the RTL.
- `tb_link_port`: two ports back to back with random traffic both ways and slow
  receivers. It checks that tokens arrive in order with no loss, that credit
  stalls occur, and that an external-timing stream runs at exactly 32 cycles per
  token.
- `tb_route_lookup`: random tables and identifiers against a reference scan.
- `tb_xs1_switch`: random packets on all 12 ports. It checks that packets arrive
  whole on a port of the right direction, that parallel routes use several
  internal ports, the two-cycle header latency, and that a route left open
  blocks a second packet until it is closed.
- `tb_l2_package`: on-die and XLink paths, with rates of 7 and 32 cycles per
  token, parallel use of on-die links, and credit stalls.
- `tb_swallow_top`: a 2 × 1 slice grid (32 cores). Every core sends random
  packets to random cores, and `swallow_traffic` checks every delivery. The test
  also requires each mechanism to have happened at least once: delivery to a
  processor, layer change, vertical and horizontal routes, close by `END`,
  credit stall, parallel on-die links, and a circuit held open for 400 cycles.
The full 480-core default grid compiles and lints, but it has not been
simulated. Verilator generates C++ separately for each of the 240 package
instances, more than 400 MB of it, which is beyond practical build times. The
largest grid simulated is 3 × 2 slices: 6 × 8 packages, 96 cores. It is
`tb_swallow_top` with `SX = 3, SY = 2` and four packets per core. All 384
packets were delivered and every mechanism was seen. That build takes under
two minutes; the generated code grows linearly with the number of packages.

## Simulating

All files are plain SystemVerilog 2017. The package `rtl/swallow_pkg.sv` must be
read first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    --top-module tb_swallow_top rtl/swallow_pkg.sv tb/tb_swallow_top.sv
./obj_dir/Vtb_swallow_top
```

Replace `tb_swallow_top` with any other testbench name. Asynchronous resets are
active low; the testbenches give `rst_n` a real falling edge at time 0.5.

To change the machine size, override `SLICES_X` and `SLICES_Y` on
`swallow_top`. To change link speed, drive different `ts_*`/`tt_*` values. To
change buffering, override `BUF_DEPTH` and `CREDIT_CHUNK` on `link_port`.
