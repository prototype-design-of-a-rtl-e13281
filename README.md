# Timing and Fast Control (TFC) network: synthesizable RTL

A free-streaming detector readout has no trigger to tell the front-end
electronics when an event happened. Every hit carries a timestamp instead, and
the readout later assembles events from those timestamps. That only works if
every readout board agrees on the time: the same clock frequency, the same
phase of the 40 MHz system clock, and the same 64-bit count. The Timing and
Fast Control (TFC) system delivers this agreement over a tree of bidirectional
optical links. A single **Master** is the root, **Submasters** fan out, and the
**Endpoints** sit on the readout boards. The same links are meant to carry
throttling commands later, which is why they are bidirectional and kept short
in latency.

The system uses two mechanisms:

* **Cascaded clock recovery.** Each node's transceiver recovers the clock
  from the link above. An external jitter-cleaning PLL cleans it, and the node
  uses it for its own logic and for all the links below. Every node therefore
  runs at exactly the Master's frequency, and nothing can drift.
* **Periodic timestamp frames.** Each node keeps its own 64-bit timestamp and
  a *subcycle* counter. The Master sends its time down the tree at regular
  intervals. Each receiving node checks that time against its own and corrects
  it if needed. Submasters send their own time, now corrected, further down.

This repository holds synthesizable SystemVerilog for the firmware of all three
node roles and for a complete tree built from them. It also holds
self-checking testbenches. The transceivers, PLLs and clock managers are
vendor or board parts. They stay outside the RTL, as ports.

## Time inside a node: timestamp and subcycle

The system clock is 40 MHz, and the link logic runs at 120 MHz. The ratio is
exactly three, so each 40 MHz period holds three 120 MHz cycles, numbered
0, 1, 2. `subcycle_counter` produces that number, `sub`. A node's time,
counted in 120 MHz cycles, is therefore

    time = 3 * timestamp + sub

`timestamper` holds the 64-bit timestamp. It advances in the cycle where
`sub == 2` (`sys_tick`), so `sub` returns to 0 in the same cycle that the
timestamp steps. Everything in a core runs on the 120 MHz clock. The 40 MHz
domain is represented by the `sys_tick` enable and the `sub` value, not by a
second clock. Aligning a node's 40 MHz phase therefore means reloading its
subcycle counter. If the board needs a real 40 MHz clock, it can be aligned
to `sys_tick`, for instance through the clock manager's phase shift.

## The timestamp frame and how a receiver uses it

This is the central mechanism of the design.

**Sending (`timing_master`).** A frame becomes due every `period` ticks of
40 MHz (register `REG_PERIOD`, default 40000 ticks = 1 ms). The first
subcycle-0 cycle after that latches the timestamp `T` and the subcycle `s0`
of that cycle. Three words then leave on three consecutive cycles:

| word | k | payload |
|------|---|---------|
| SOF  | 1 | bits 31:10 zero, bits 9:8 = `s0`, bits 7:0 = `8'hFB` |
| HI   | 0 | `T[63:32]` |
| LO   | 0 | `T[31:0]`  |

The same word stream goes to every downstream link of the node at once.

**Receiving (`timing_endpoint`).** The SOF word starts a frame. It records
`s0`, captures the local subcycle at which the SOF arrived (`REG_ARR_SUB`),
and starts a cycle count. In the cycle that the LO word arrives, `d` cycles
after the SOF, the FSM works out what the sender's time will be in the next
cycle:

    e        = s0 + lat_comp + d + 1        (120 MHz cycles since T began)
    new_sub  = e mod 3
    new_ts   = T + e div 3

It compares these with what its own counters will hold in the next cycle. It
reloads each counter only if that counter's value differs: `sub_load` is the
phase correction and `ts_load` the timestamp correction. Both corrections are
counted (`REG_PH_CORR`, `REG_TS_CORR`). A frame that finds the local time
already right changes nothing. A gap between the words does not matter, because
`d` is measured. A control word other than SOF inside a frame aborts the frame
(`frame_errs`).

**What "synchronised" means.** `lat_comp` (register `REG_LAT_COMP`) defaults
to 0. The receiver then takes the SOF's arrival as the moment `T` was latched,
so its time equals the sender's time delayed by the real path latency. That
path runs through the latch, the sender's LAU, the link and the receiver's
LAU. Every node of the same depth has the same path, so all Endpoints share
one constant offset to the Master. This is the behaviour the tree is designed
for. Writing the measured latency into `REG_LAT_COMP` removes the offset.

**Determinism.** The offset is constant only as long as the path latency is.
The elastic FIFOs of the LAU (below) add latency that depends on how full they
are. Their fill level is fixed when a link comes up and stays fixed while
sender and receiver run at the same frequency. The level changes if a node's
clock slipped against the upstream clock while it ran free, or if the link
re-initialised with a different phase relation. The testbenches therefore
drop the Endpoint links while the Endpoint clocks relock (see below). The
network testbench measures the offset as the same for all 200 Endpoints, to
within one cycle. It also stays exactly constant from frame to frame.

## Link Access Unit

`link_access_unit` hides one transceiver from the rest of the core. It is
built from four parts:

* **Tx FIFO / Rx FIFO** (`async_fifo`): dual-clock FIFOs with Gray-coded
  pointers, 16 words deep by default. They cross between the core clock and
  the transceiver's TXUSRCLK and RXUSRCLK. All three clocks have the same
  frequency, so the FIFOs act as elastic buffers:
  * The core writes one word every cycle. While the link is down this is a
    handshake word. While it is up it is the user's word, or an IDLE filler
    when the user has nothing to send.
  * The transceiver side reads one word every cycle once the FIFO is half
    full.
  * The Rx FIFO works the same way in the other direction.
  * If a FIFO runs dry, reading stops and restarts at half full, which
    re-centres it.
  * Both occupancy counts are brought out (`REG_FIFO_CNT`).
* **Initialisation FSM** (`lau_init_fsm`): both ends run the same handshake.
  A side sends INIT words. After 8 consecutive INIT or ACK words from the far
  end, it sends ACK words. After 8 consecutive words other than INIT, the
  link is up (`init_done`). It falls back to INIT on any of these:
  * a protocol error;
  * an INIT from the far end;
  * 64 cycles without a received word.
* **Protocol checker** (`lau_protocol_checker`): a word is legal if it is one
  of the following, with no decode error reported by the transceiver:
  * any data word;
  * the IDLE, INIT or ACK control word;
  * a SOF with its reserved bits zero.

  Illegal words are counted (`REG_LINK_ERR`). Legal data and SOF words
  received while the link is up are marked valid. IDLE, INIT and ACK never
  reach the user.

The control words use the 8b/10b-style low bytes `8'hBC` (IDLE `0x000000BC`,
INIT `0x000001BC`, ACK `0x000002BC`) and `8'hFB` (SOF). The transceiver is
assumed to deliver a 32-bit word, a control flag, a valid flag (aligned and
locked) and a decode-error flag per RXUSRCLK cycle (`gth_rx_t` in `tfc_pkg`).

In the testbenches a word needs 28 core cycles from one core to the other
through two LAUs and a 6-cycle link model. Bringing a link up takes about 75
cycles.

## Node cores

| module | role | contents |
|---|---|---|
| `tfc_master_core` | root | subcycle counter and timestamper (free-running, presettable), `tfc_downstream` (timing master + `N_LINKS` LAUs), `wb_slave` |
| `tfc_submaster_core` | inner node | `tfc_upstream` (LAU + timing endpoint) keeps the local time locked upstream; `tfc_downstream` re-sends it on `N_DOWN` links, but only once the node is synchronised |
| `tfc_endpoint_core` | leaf (readout board) | `tfc_upstream`, subcycle counter, timestamper, `wb_slave` |
| `tfc_network` | top | one Master, `N_SUB` Submasters, `EP_PER_SUB` Endpoints each; every link end and every node clock is a port |

Each core exposes `ts`, `sub` and `sys_tick` to the board's own logic; the
Endpoint and Submaster also expose `synced`. The upstream direction of each
link is initialised and kept alive, but it carries no user traffic yet: it
is reserved for throttling messages.

`tfc_network` does not connect the links itself. On hardware they pass through
transceivers and fibres. The tree is wired as follows:

* Master link `i` goes to Submaster `i`'s upstream port.
* Submaster `s`'s downstream link `e` goes to Endpoint `s*EP_PER_SUB+e`.
  The Submaster downstream ports are flattened in that same order.

Each node clock (`clk_m`, `clk_s`, `clk_e`) is the 120 MHz clock of that
board: the master oscillator for the Master, and the cleaned recovered clock
for the others.

### Register map (Wishbone, 32-bit, word addresses; `tfc_pkg`)

| addr | name | access | meaning |
|---|---|---|---|
| 0 | ID | RO | `"TFCM"`, `"TFCS"` or `"TFCE"` |
| 1 | CTRL | RW | bit 0: synchronisation enable (reset 1). Master and Submaster: send frames. Submaster and Endpoint: apply received frames |
| 2 | STATUS | RO | bit 0: selected or upstream link up; bit 1: synced; bits 31:16: number of links up |
| 3 | TS_LO | RO | timestamp[31:0]; reading it snapshots timestamp[63:32] into TS_HI |
| 4 | TS_HI | RO | snapshot of timestamp[63:32] |
| 5 | SUB | RO | current subcycle |
| 6 | PERIOD | RW | frame period in 40 MHz ticks (Master, Submaster) |
| 7, 8 | TSSET_LO/HI | RW | Master only: timestamp preset; writing HI loads it |
| 9 | FRAMES | RO | frames sent (Master), received (Endpoint), or either (Submaster, by LINK_SEL) |
| 10, 11 | TS_CORR, PH_CORR | RO | timestamp and subcycle corrections applied |
| 12 | ARR_SUB | RO | local subcycle at which the last frame arrived |
| 13 | LINK_ERR | RO | protocol errors of the selected link (Endpoint: frame errors in 31:16) |
| 14 | FIFO_CNT | RO | {Rx FIFO count, Tx FIFO count} of the selected link |
| 15 | LINK_SEL | RW | link selector (Submaster: 0 = upstream, 1..N = downstream) |
| 16 | LAT_COMP | RW | latency compensation in 120 MHz cycles (Submaster, Endpoint) |

`wb_slave` answers each access with a one-cycle ack in the following cycle;
assertions in it check this.

## Parameters

| parameter | default | where from |
|---|---|---|
| `SUBCYCLES` | 3 | 120 MHz / 40 MHz, as in the original design |
| timestamp width | 64 | as in the original design |
| `N_LINKS` (Master core) | 48 | optical connections of one BNL-712 board |
| `N_SUB` × `EP_PER_SUB` (top) | 5 × 40 | 200 readout boards split over 5 Submasters; the split is this design's |
| `N_DOWN` (Submaster core) | 40 | follows the split above |
| `FIFO_AW` | 4 (16 words) | own choice |
| `PERIOD_DEFAULT` | 40000 ticks (1 ms) | own choice; programmable |
| handshake `N_CONFIRM`, `RX_TIMEOUT` | 8, 64 | own choice |

## What follows the original design and what does not

Taken from the original design:

* the three node roles;
* the tree of bidirectional links with cascaded clock recovery;
* the 64-bit timestamp counted at 40 MHz;
* the 120 MHz transport clock;
* the subcycle counter and the alignment of the 40 MHz phase from the
  subcycle at which a frame arrives;
* periodic serialisation of the timestamp into 32-bit words, broadcast to
  all downstream links;
* the LAU's structure: Tx and Rx FIFOs with counts, an initialisation FSM
  and a protocol checker;
* Wishbone control of every core.

The following are this design's own:

* the word codes, the frame format and its timing;
* the handshake;
* the legal-word rules;
* the elastic-buffer operation;
* the correction arithmetic and the latency-compensation register;
* the register map;
* the tree size.

Departures and omissions:

* The 40 MHz logic (timestamper, Wishbone slave) runs on the 120 MHz clock
  with an enable, rather than on a separate 40 MHz clock. Phase alignment
  reloads the subcycle counter and does not drive a clock manager.
* The Master core's *trigger loop counter* is left out. Its function is not
  described.
* Clock managers (40/80/120/160 MHz), transceivers, the jitter-cleaning PLL
  with its switchover to a local reference on link loss, and the optical
  modules are not RTL. Their signals are ports.
* Throttling is not implemented: neither occupancy aggregation, the decision
  at the Master, nor the command broadcast. Nor is the LAU's future sharing of
  the link between timing and control messages. The upstream direction
  carries only filler words.
* The Submaster's "switch fabric" is reduced to its timing function:
  synchronise upstream, re-send downstream.
* Latency through the elastic FIFOs is constant only while the link stays up
  at one frequency. This matches the known limitation of buffered transceiver
  datapaths. `REG_FIFO_CNT` lets software see the fill levels.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog. Behavioural helpers
used only by the testbenches:

* `gth_link_model` models one link direction: a word delay of 6 cycles, lock
  time, fibre pull and error injection.
* `wb_bfm` is a Wishbone driver.

The end-to-end testbenches `tb_tfc_network` (2 × 2 Endpoints) and
`tb_tfc_network_full` (the default 5 × 40 tree, no parameter overrides) share
`tfc_network_tb_body.svh`. They repeat the kind of laboratory test the design
was evaluated with:

1. All links come up.
2. **Asynchronous run.** Synchronisation is switched off on every node, and
   each Endpoint runs on its own clock, 0.1–0.3 % off the Master frequency.
   The Endpoint times must drift away from the Master's. Every Endpoint does.
3. **Synchronous run.** The Endpoint clocks return to the Master frequency.
   Their links drop while the PLLs relock, then initialise again.
   Synchronisation is switched on with a 40-tick frame period. Every node
   must become synced after timestamp and phase corrections. All Endpoints
   must then show the same offset to the Master (within one cycle), and it
   must not change over ten checks 500 cycles apart.
4. A decode error on one Endpoint link takes that link down. The link must
   recover, and the Endpoint must keep its offset.
5. Every node's registers are read over its own Wishbone port: identifier
   and counters on the Endpoints, a link selection written and read back on
   each Submaster.

The testbench counts each of these mechanisms (link initialisation, drift,
frames, timestamp corrections, phase corrections, link recovery) and fails if
any of them never happened. At the default size the offset is 61–62 cycles
for all 200 Endpoints. The full-size run takes about a minute to build and
1.5 minutes to simulate with Verilator.

## Simulating

With Verilator 5 (two-state, `--timing` for the testbench delays):

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
        rtl/tfc_pkg.sv tb/tb_tfc_network.sv --top-module tb_tfc_network -Mdir obj
    ./obj/Vtb_tfc_network

Any other testbench is run by replacing the file and top name, for example
`tb_link_access_unit` or `tb_timing_endpoint`. The testbenches use the default
time unit of 1 ps; clock half-periods are given in those units where the exact
frequency matters.

Everything in `rtl/` is synthesizable. It has one clock domain per core plus
the transceiver clocks, reached only through the FIFOs and `rst_sync`.
