# Chip site interconnect: many small designs, one set of pins

A tapeout shuttle for a class or a research group puts dozens of small,
independent designs ("chip sites") on one die. Giving every site its own pads,
controller and power supply costs far more area than the sites themselves.
This design shares all of that. A single global controller talks to the
outside world through a five-pin JTAG port. A thin chain of identical
*stations* runs through the narrow channels left between the packed sites and
visits every site once. Through this chain the JTAG host can:

* read and write a 4 GB memory-mapped space inside any one site;
* turn a site's power switches, enable and soft reset on and off;
* watch a "busy" flag that a site raises while it works, to time bench power
  measurements.

The central constraint drives every detail below: the interconnect must have
a **fixed area per station**, whatever the number of sites, their clock
frequency or their complexity. A station lives in a track one grid unit wide,
and anything that grows with the site count would no longer fit. So there are
no per-site buses, only a fixed-width message that every station forwards. All
queues are one entry deep, and bandwidth is traded away freely. Only one site
is meant to be active at a time, with a single master at the head of the
chain.

The RTL here covers the digital part of that architecture: the controller,
the stations, the optional pipeline slices and the top level. The user designs
in the sites, the power-switch cells and the pads are outside it; their
signals are ports of the top module.

## Block structure

```
 pins                 chipstitch_top
 ─────   ┌────────────────┐   track bundle   ┌─────────┐      ┌─────────┐         ┌─────────┐
 clk_io ─┤ cs_global_ctrl ├──────────────────┤station 0├─[sl]─┤station 1├── ... ───┤station N-1├─ tied off
 rstn_io─┤  cs_jtag_ctrl  │ clk, clk_matched,└────┬────┘      └────┬────┘         └────┬────┘
 JTAG(5)─┤  cs_clk_gen    │ rstn, debug,          │                │                   │
debug_io─┤  reset sync    │ h2b →, ← b2h        site 0           site 1              site N-1
         └────────────────┘                    (user block, own power domain: outside the RTL)
```

| Module | Role |
|---|---|
| `cs_pkg` | message structs, field widths, periphery register addresses |
| `chipstitch_top` | global controller + interconnect; site signals as port arrays |
| `cs_global_ctrl` | reset synchronizer, JTAG controller, matched-clock generator, debug pin |
| `cs_jtag_ctrl` | IEEE 1149.1 TAP; turns scans into requests and reads back responses |
| `cs_clk_gen` | **behavioural model** of the per-site clock delay lines |
| `cs_interconnect` | line of `N_SITES` stations, optional pipeline slices, tie-off |
| `cs_station` | routing, periphery registers, clock-domain crossing into the site |
| `cs_pipe_slice` | optional register stage for long track segments |
| `cs_pipe_queue` | single-entry normal valid/ready queue |
| `cs_async_fifo` | single-entry asynchronous FIFO |
| `cs_sync2` | two-flop synchronizer |

## The track bundle and its messages

The bundle between neighbouring stations has three parts, all of constant
width:

| Part | Signals | Direction |
|---|---|---|
| system | `clk`, `clk_matched`, `rstn` | away from the controller |
| | `debug` | toward the controller |
| host-to-block (h2b) | `val`, `rdy`, 73-bit message | away from the controller |
| block-to-host (b2h) | `val`, `rdy`, 73-bit message | toward the controller |

Requests and responses share one message layout (`cs_pkg::msg_t`, MSB first):

| Field | Bits | Meaning |
|---|---|---|
| `cmd` | 1 | 0 = read, 1 = write |
| `site_addr` | 7 | which site: 0 … 127 |
| `bank_addr` | 1 | 0 = user bank (inside the site), 1 = periphery bank (in the station) |
| `word_addr` | 32 | address inside the bank |
| `data` | 32 | write data, or read data in a response |

Inside a site the site and bank fields are dropped. The 65-bit
`{cmd, word_addr, data}` (`site_msg_t`) is what crosses into and out of the
user block. Every request produces exactly one response, which carries the
request's command and address. A read response carries the data read; a write
response echoes the data written. A response from a user block is tagged by
its station with the station's own site address and bank 0.

Handshakes are valid/ready throughout. A transfer happens on a rising clock
edge where both are high, and an offered message stays until taken. Any full
queue therefore stalls the traffic behind it. No credits travel along the
chain.

## Memory map of one site

| Bank | Word address | Register | Reset value | Effect |
|---|---|---|---|---|
| 1 (periphery) | `0x1000` | `rstn_soft` | 1 | 0 holds the user block in reset |
| 1 | `0x1004` | `en` | 0 | 1 connects the user block to the interconnect |
| 1 | `0x1008` | `en_pwr_bar` | 1 | 0 turns the site's power switches on |
| 1 | anything else | — | — | reads 0, writes ignored |
| 0 (user) | `0x0000_0000`–`0xFFFF_FFFC` | user-defined | — | passed to the user block |

Each periphery register is bit 0 of the data word. The registers sit in the
station, outside the site's power domain, so they work while the site is
powered off. At reset every site is powered off and disabled. To bring one up,
the host writes `en_pwr_bar = 0`, then `en = 1`.

## Inside a station

A station (`cs_station`) has four single-entry queues: an h2b pipe queue, an
h2b user queue, a b2h pipe queue and a b2h user queue. These queues are most
of its area. There are also three 1-bit registers, three synchronizers and a
little steering logic.

**Routing.** A request enters the h2b pipe queue. At the head of the queue the
station compares `site_addr` with its own `station_id` (station *i* has
address *i*):

* **Not this site:** the request goes on, unchanged, to the next station.
* **Periphery bank:** the station reads or writes its register. It puts the
  answer on its b2h output in the same cycle it takes the request from the
  queue.
* **User bank, site enabled:** the 65-bit part of the request goes into the
  h2b user queue (an async FIFO) toward the user block.
* **User bank, site disabled:** the station answers by itself: read data 0, or
  the echoed write data. Without this, a request to a dark site would sit at
  the head of the queue and block the whole chain, including the write that
  would enable the site.

**Responses.** The b2h output is shared by three sources, with fixed priority:

1. the station's own periphery or disabled-site answer;
2. the user block's response, out of the b2h user queue;
3. a response from further down the chain, out of the b2h pipe queue.

Fixed priority cannot starve anyone here, because one master and one active
site mean there is rarely more than one response in flight.

**Isolation.** While `en` is 0 the station forces `site_req_val` and
`site_resp_rdy` low, ignores `site_resp_val` and masks the site's debug flag.
A powered-down block may drive anything on its outputs; none of it reaches
the track. No separate isolation cells are needed.

**Site controls.** These signals go to the user block:

* `site_rstn` is low while the system reset or `rstn_soft` is low.
* `site_en` follows the `en` register.
* `site_en_pwr_bar` drives the power switches directly. It needs no
  synchronizer, because nothing in the user block samples it.
* `site_clk` is the system clock.

`site_rstn` and `site_en` each pass a two-flop synchronizer. So does the
site's `site_debug` flag on its way back.

**Debug chain.** `debug_out = debug_in | (synchronized site_debug & site_en)`.
The OR of all enabled sites' busy flags reaches the `debug_io` pin. Only one
site is normally enabled, so this is that site's busy flag.

## Crossing into the user block: `clk_matched`

This part of the design looks odd at first sight.

The user block has its own clock tree. Its flops see `site_clk` only after the
tree's insertion delay. That delay can be anything: a nanosecond or more in a
large site. The physical design of the station knows nothing about it. If the
station launched `site_req_msg` on `clk` into flops clocked by the late
`site_clk`, the data would arrive before the capturing edge. The path would be
a hold violation. A timing-driven layout tool fixes a hold violation by adding
delay buffers on all 65 bits. Those buffers would need area that grows with
the user's insertion delay without bound, and the track has a fixed width.

Instead, the global controller makes a second clock, `clk_matched`: the
system clock delayed by a delay line sized to the active site's insertion
delay. It travels down the track next to `clk`, matched in delay. Then:

* Everything in the station that launches into the user block runs on
  `clk_matched`: the read side of the h2b user queue, the write side of the
  b2h user queue and the three synchronizers.
* In timing analysis, the launch clock is late by the insertion delay and the
  capture clock is late by the same amount. The path looks like an ordinary
  same-edge path, and no hold buffers are added.
* `clk` and `clk_matched` are treated as asynchronous inside the station. The
  messages cross through single-entry async FIFOs and single bits through
  two-flop synchronizers, so any skew between the two is safe.

`cs_async_fifo` is a one-entry FIFO built from a data register and one toggle
bit per side:

* Writing stores the message and flips the write toggle.
* Reading flips the read toggle.
* Each side sees the other's toggle through a two-flop synchronizer.
* The writer sees "full" while the toggles differ. The reader sees "data"
  while they differ.

The data register changes only while the FIFO is empty, so the reader never
sees it change. A write becomes visible to the reader two or three read
clocks later.

There are several delay lines, one per site, and a multiplexer in front of
them. The JTAG `CLKSEL` register picks the line (below). In this RTL the delay
lines are a behavioural model (`cs_clk_gen`): `clk_matched` follows `clk`
after `DELAY[sel]` time units. The real lines are buffer chains sized from
each site's layout. Change the selection only while no site is active,
because real delay lines glitch when switched.

## The global controller and its JTAG protocol

`cs_global_ctrl` contains three things:

* a reset synchronizer: `rstn` falls with `rstn_io` and rises two clocks
  after it;
* the matched-clock generator;
* `cs_jtag_ctrl`.

It registers the debug flag once before it drives the `debug_io` pin.

`cs_jtag_ctrl` samples TCK, TMS, TDI and TRST_N with the system clock through
synchronizers and acts on the detected TCK edges. Keep TCK at or below a
quarter of the system clock; the testbenches use one sixth or less. The TAP
is the standard 16-state IEEE 1149.1 machine. TDO changes on falling TCK, and
data is shifted LSB first. The instruction register is 4 bits wide; Capture-IR
loads `0001`.

| IR | Name | DR bits | Use |
|---|---|---|---|
| `0x2` | H2B | 73 | shift in a `msg_t`; Update-DR sends it into the chain |
| `0x3` | B2H | 76 | Capture-DR loads `{lost, pending, resp_valid, msg_t}` (bit 75 … 0) |
| `0x4` | CLKSEL | 7 | site whose delay line drives `clk_matched` (read back on capture) |
| other (`0xF`) | BYPASS | 1 | standard bypass; selected after Test-Logic-Reset |

The B2H status bits mean:

* `resp_valid`: the scan carries a new response. Capturing it frees the
  response register.
* `pending`: the last request has not yet entered the chain.
* `lost`: a request was scanned in while the previous one was still pending,
  and was dropped. Cleared by the capture.

A typical host transaction:

1. Select IR `0x2`, scan the 73-bit request.
2. Select IR `0x3`, scan 76 bits until `resp_valid` (bit 73) is 1.

A response that is not read stays in the response register. `b2h_rdy` is then
low, and further responses stall in the chain until the host reads them. This
is ordinary valid/ready backpressure, and the end-to-end testbench exercises
it on purpose.

## Topology, pipeline slices and timing

The stations form a line, not a ring: closing the ring would cost track area
for nothing. Requests flow away from the controller and responses flow back.
The far end is tied off: its h2b output is always ready and discards what it
gets. A request for a site address with no station is therefore silently
dropped. There is one master and no cycle in the dependency graph, so the
chain cannot deadlock.

Every signal in the bundle goes only from one station to the next, except
`rstn` and `debug`, which pass through stations combinationally. Where two
stations are far apart, a `cs_pipe_slice` can be placed between them
(`SLICE_MASK` bit *i* puts one in front of station *i*). A slice registers
h2b and b2h in single-entry queues, and registers `rstn` and `debug` in one
flop each. `rstn` is cleared at once and released a clock later.

**Throughput and latency.** Each queue is a *normal* single-entry queue:
`enq_rdy` is simply "empty". A message therefore moves at most every second
cycle; this halves throughput but nearly halves the queue area. On an idle
chain, a periphery read of site *k* comes back `2k + 2s` cycles after station
0 accepts it, where *s* is the number of slices in front of stations 0 … *k*.
`tb_cs_interconnect` checks this formula. A user-bank access adds the two
async-FIFO crossings (about 3 clocks each way) and the user block's own
latency. In practice the JTAG scans, about 90 TCK cycles per request, dominate
everything.

## Parameters and sizes

| Parameter | Where | Default | Notes |
|---|---|---|---|
| `N_SITES` | top, interconnect | 25 | 1 … 128 (7-bit site address) |
| `SLICE_MASK` | top, interconnect | bit 1 set | one slice, in front of station 1 |
| `SITE_DELAY[128]` | top, global controller | all 0 | matched-clock delay per site, simulation time units |
| `W` | `cs_pipe_queue`, `cs_async_fifo` | 73 / 65 | message widths |

Nothing in a station or slice depends on `N_SITES`; adding sites only adds
stations. The default of 25 sites is the size of the reference layout. The
architecture was evaluated for 5 to 100 sites. Chips with 50 or 100 sites need
`N_SITES` raised, which the 7-bit address allows up to 128.
`tb_cs_site_counts` runs all five evaluated sizes (5, 10, 20, 50 and 100)
with the same RTL.

A generic synthesis run without a cell library shows how the sizes add up:

| Unit | Flip-flop bits | Notes |
|---|---|---|
| station | 299 | about 276 of them are the four queues (73 + 73 + 65 + 65) |
| pipeline slice | 150 | two 73-bit queues, plus the `rstn` and `debug` flops |
| 25-site interconnect | 7488 | about 300 per site, the slice included; each site adds the same fixed cost |
| whole chip | 7757 | the interconnect, plus about 270 bits for JTAG and reset |

These are logic counts only. The silicon area of the track depends on the
cell library and on the placement.

## What is not in the RTL

* **User blocks.** Each site's design belongs to its author. The testbenches
  use `tb_site_model`, a memory that answers reads and writes after a random
  delay and raises `debug` while busy.
* **Power switches.** A ring of header cells around each site, on the
  placement grid, controlled by `site_en_pwr_bar`. They are physical cells, so
  the signal is a top-level port.
* **Pads** for the clock, reset, JTAG and debug pins. The ports stand for
  them.
* **Delay lines** of the matched-clock generator. `cs_clk_gen` models each
  line as a delayed continuous assignment. Synthesis drops the delays and
  keeps only the multiplexer, so a real chip needs hand-built buffer chains
  in their place.
* **Floorplanning.** The site-packing tool that places sites and routes the
  track is software and has no RTL.

## Design decisions not fixed by the architecture description

The architecture fixes these:

* the message fields and widths, and the two banks;
* the three register names and addresses;
* four single-entry queues per station, with normal (not pipelined) queues
  and valid/ready handshakes;
* 65-bit single-entry async FIFOs and two-flop synchronizers on `clk_matched`;
* the line topology with a tied-off end;
* pipeline slices that register `rstn`;
* a 5-pin JTAG port.

These are choices made in this RTL:

* command encoding (0 = read), field order inside the vector;
* register reset values (powered off, disabled, soft reset released);
* every request answered, including writes (data echoed);
* disabled-site requests answered by the station with data 0;
* unmapped periphery addresses reading 0;
* fixed b2h priority (local, own site, downstream);
* pipe queues placed at each station's inputs;
* the OR-combined debug chain, gated by `en`;
* the AND of system reset and `rstn_soft` for `site_rstn`;
* dropping requests past the last station;
* default slice placement;
* the whole JTAG register set, instruction codes and status bits;
* sampling JTAG with the system clock instead of a TCK domain;
* choosing the matched-clock line by a JTAG register;
* reset synchronizer on `rstn_io` and a register on `debug_io`;
* the toggle-bit construction of the async FIFO.

## Simulating

Every file has one module, package or interface named like the file. Compile
`cs_pkg.sv` first and let Verilator find the rest on the search path. Use a
1 ns / 1 ps timescale: testbench delays and `SITE_DELAY` are in ns.

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -y rtl -y tb rtl/cs_pkg.sv tb/tb_chipstitch_top.sv --top-module tb_chipstitch_top
./obj_dir/Vtb_chipstitch_top
```

Each testbench prints one line, `TB_RESULT checks=N failures=M`, and stops
itself with a watchdog if the design hangs. Verilator is a two-state
simulator: every testbench resets the design through its reset inputs.

| Testbench | What it shows |
|---|---|
| `tb_cs_pipe_queue` | reference-model compare under random traffic; one message per two cycles |
| `tb_cs_async_fifo` | unrelated clocks (10 ns / 7.3 ns); order, single occupancy, 2–3 clock latency |
| `tb_cs_sync2` | two-edge delay, asynchronous reset |
| `tb_cs_pipe_slice` | both queues in order under backpressure; `rstn` and `debug` timing |
| `tb_cs_station` | routing, registers, user-bank round trips, disabled-site answers, downstream forwarding, soft reset, debug gating, periphery latency |
| `tb_cs_interconnect` | 6 stations, 2 slices, 6 user blocks: random traffic with model compare, absent sites, round-trip latency formula |
| `tb_cs_jtag_ctrl` | TAP, Capture-IR, BYPASS, request/response scans, lost-request flag, CLKSEL, TRST_N |
| `tb_cs_clk_gen` | per-site delays of the behavioural clock generator |
| `tb_cs_global_ctrl` | reset synchronizer, JTAG round trip, CLKSEL on `clk_matched`, debug pin |
| `tb_chipstitch_top` | the full 25-site chip driven only through its pins (details below) |
| `tb_cs_site_counts` | five chips of 5, 10, 20, 50 and 100 sites side by side, same program on each, far-site round trip 2(N−1)+2 clocks |

`tb_chipstitch_top` drives the default 25-site chip only through its pins. It
covers periphery access near and far, user-bank access, disabled-site
answers, absent sites, b2h backpressure, slice traversal, soft reset,
matched-clock selection and the debug pin. It counts each of these and fails
if any never happened. It runs in a few seconds.

`tb_site_model`, `tb_jtag_if` and `tb_site_count_chip` are testbench
helpers:

* a user-block model;
* a JTAG host with `reset`, `shift_ir` and `shift_dr` tasks;
* one chip of a given size, with its host program.

## Known limits

* Only one site should be active at a time. Several enabled sites work
  logically, but the single `clk_matched` fits only the selected site's clock
  tree. In silicon the others would see unmatched timing at their boundary.
* A request for a site whose `en` is cleared while the request sits in that
  site's async FIFO stays there until the site is enabled again.
* The JTAG controller is not a full 1149.1 implementation. There is no IDCODE
  and no boundary scan, and TCK must be slow relative to the system clock.
