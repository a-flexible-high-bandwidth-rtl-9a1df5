# A multi-port DDR memory controller with per-port clock-crossing FIFOs and window-based arbitration

Many hardware blocks often share one external DDR SDRAM. Each block runs on its own clock
and data width, while the memory controller's local interface runs on one clock and one wide word.
This controller sits between the two and solves three problems:

* **Any clock, any width.** Each of up to 32 ports has two dual-clock, dual-width FIFOs. One
  carries writes towards memory and one carries reads from it. An application module ("MOD")
  writes and reads these FIFOs on its own clock and in its own word size. It never waits for the
  arbiter, only for a full or empty FIFO.
* **Latency hidden by buffering.** The MOD only writes into its FIFO. The controller moves whole
  bursts when a port is ready: a write FIFO holds a burst's worth of data, or a read FIFO has room
  for one. Memory latency therefore overlaps with the MOD's own work.
* **Fewer bus turnarounds.** Turning the DRAM data bus from read to write (or back) wastes cycles.
  The arbiter queues requests of each direction separately. It then serves them in *windows*: all
  requests that are waiting in one direction when a window opens are served together, then the bus
  turns. This is window-based first-come-first-serve (WFCFS).

Software sets everything at run time: the number of used ports, and per port and direction a start
address, an end address and a burst length. It does this through a small register file.

The RTL covers the controller front end: the port FIFOs, the configuration registers and the
arbiter. The DDR PHY is vendor IP and lies outside it. The top level brings out a simple burst
command interface towards the PHY. `tb/mpmc_phy_model.sv` is a behavioural model of PHY plus DRAM,
used only in simulation.

## Block structure

```
 MOD_0..MOD_{N-1} (own clocks)          clk domain (PHY local clock, 150 MHz target)
 ───────────────────────────  ┌───────────────────────────────────────────────────────────┐
  wr_en/wr_data ──► [write DCDWFF]──► MUX (wsel) ──────────────► phy_wdata               │
  rd_en/rd_q   ◄── [read  DCDWFF]◄── demux (rsel) ◄────────────── phy_rdata              │
          mpmc_interface (mpmc_port ×N)   │ wr_ready / rd_ready                            │
                                          ▼                                                │
  CONTROL ── cfg_* ──► mpmc_config ──► mpmc_arbiter                                        │
                      (N, SA, EA,      ├─ write PRE ─► WFF ─┐                              │
                       BC, CA ×2N)     ├─ read  PRE ─► RFF ─┤► mpmc_pos ─► phy_cmd ────────┘
                                       │                    │   (window scheduler,
                                       │◄── trans_done, j ──┘    WCTRL, RCTRL, MUX)
```

| File | Part |
|---|---|
| `rtl/mpmc_pkg.sv` | shared constants (32 ports, 32-bit addresses, BC ≤ 64, 128-bit PHY word) and types (`req_t`, `phy_cmd_t`) |
| `rtl/dcdwff.sv`, `mpmc_dpm.sv`, `mpmc_sync.sv` | dual-clock dual-width FIFO, its memory and pointer synchronisers |
| `rtl/mpmc_port.sv`, `mpmc_interface.sv` | one port (two FIFOs) and the array of ports with the data MUX and demux |
| `rtl/mpmc_config.sv` | 8N+1 configuration registers and the current-address update |
| `rtl/mpmc_polling.sv`, `mpmc_req_fifo.sv`, `mpmc_pre.sv` | PRE: polling, FLAG register, request FIFO |
| `rtl/mpmc_wctrl.sv`, `mpmc_rctrl.sv`, `mpmc_pos.sv` | POS: write control, read control, window scheduler |
| `rtl/mpmc_arbiter.sv` | write PRE + read PRE + POS |
| `rtl/mpmc_top.sv` | the controller |

## The arbitration pipeline (the hard part)

The arbiter has two halves. Requests flow from PRE to POS through a FIFO. Completions flow back
from POS to PRE as a `trans_done` pulse carrying the port index `j`.

### PRE: who may ask

There is one PRE per direction. Each has:

* **POLLING**: a counter that offers port index `i = 0, 1, … N-1, 0, …`, one per clock.
* **FLAG**: a 32-bit register, reset to all ones. `F_i = 1` means port `i` has no request in
  flight in this direction.

A port gets a new request when all of these hold in the clock it is polled:

* `F_i = 1`;
* its enable `mod_en_i` is set;
* its transfer is not finished (CA < EA);
* its port is ready.

For writes, "ready" means the write FIFO holds at least BC words. For reads, it means the read
FIFO has room for BC words. This test is done in pipeline stage 0, and `F_i` is cleared on the
next clock.

In stage 1, the port's current address CA, end address EA and burst count BC come back from CONFIG.
The record `{i, BC_i, CA_i}` is pushed into the request FIFO (WFF for writes, RFF for reads). In the
same clock CONFIG advances `CA_i += BC_i`. If a re-configuration meanwhile made CA ≥ EA, nothing
is pushed and `F_i` is set again.

When POS reports the burst of port `j` as finished, `F_j` is set again, so port `j` may ask once
more. So **each port has at most one request per direction in flight**. This bounds the request
FIFO to 32 entries. It also keeps a port's bursts in address order.

### POS: who goes to memory, and when

The window scheduler in `mpmc_pos` picks a direction whenever the command bus is idle and
a FIFO holds records. It then takes the *current* entry count of that FIFO as the window size.
WCTRL or RCTRL then serves exactly that many records, oldest first. Records that arrive during
the window wait for a later one. When the window is over, the next window goes to the other
direction if that FIFO holds anything; otherwise it stays with the same direction.

A write window is over when its last burst's last beat has been accepted. A read window is over
when its last command has been accepted. So the bus turns at most once per window, not once per
request. One idle clock separates windows. After reset, reads go first.

Example with four ports, as the window report shows it:

* Ports 0, 2 and 3 become read-ready while all four become write-ready.
* RFF holds R0, R2, R3, so the first window is a read window of size 3. RCTRL issues three read
  commands on three clocks.
* Then comes a write window of size 4. WCTRL sends the bursts W0…W3 back to back.

`tb/tb_mpmc_pos.sv` checks exactly this sequence.

### WCTRL and RCTRL

Both controls are built from counters, not state machines.

**WCTRL** works as follows:

* It pops a record and loads a beat counter with BC.
* While the counter is non-zero, it drives `write_req` with the port's head word as `phy_wdata`.
  `burstbegin` is set on the first beat only.
* Each beat the PHY accepts (`phy_ready`) advances the port's write FIFO by one word and counts
  down once.
* On the last accepted beat it may already pop the next record, so bursts in a window follow
  each other without a gap.
* One clock after the last beat it pulses `trans_done` with the port index.

**RCTRL** works as follows:

* It issues one read command (`read_req`, `burstbegin`, address, size = BC) per accepted record.
* Each command issued also goes into an in-order queue of `{i, BC}`.
* Read data from the PHY arrive in command order. The head of that queue therefore says which
  port's read FIFO gets the word (`rsel`). A counter says when the burst is complete.
* When a burst is complete, `trans_done` goes to the read PRE. `rd_first` marks the first word
  of each burst: the point at which the requesting port sees its data start.

Read data keep draining into the ports during write windows, so the two controls overlap.

At most 32 read bursts may be outstanding. Each port's read FIFO reserves room for a whole
burst before the request is made, so returning data never find a full FIFO. An assertion in
`mpmc_port` checks this.

## The port FIFO (DCDWFF)

`dcdwff` joins a `WR_W`-bit write side to an `RD_W`-bit read side on unrelated clocks. One of the
two widths must divide the other. Memory words are `max(WR_W, RD_W)` bits wide, and `2**AW` of them
are stored (default 128).

* **Narrow to wide** (a write port, e.g. 32 → 128 bits): a shift register collects
  `RD_W/WR_W` words. The first word goes to the least significant bits. The full memory word is
  written when the last piece arrives.
* **Wide to narrow** (a read port): the head memory word is read out in slices, least
  significant first. The read pointer advances after the last slice.
* Write and read pointers are binary counters. Each is also kept in Gray code in a register. The
  Gray value crosses to the other clock through two flip-flops.
* `full`, `empty` and both fill levels are registered. They are computed from the *next* pointer
  values, so the flags are exact on their own side and conservative on the far side.
* `almost_full` is computed on the read side as "at least `af_level` memory words stored". The
  arbiter uses it to see that a write burst is ready. For write FIFOs `af_level` is the port's
  write BC.

The memory read is combinational (show-ahead), so `rd_q` always shows the head word.

## Configuration registers

`mpmc_config` holds 8·NP+1 32-bit registers, where NP = `NPORTS` is the number of ports built
(257 registers at the default). Direction d is 0 for write and 1 for read.

| Address | Register |
|---|---|
| 0 | N, the number of used ports (clipped to NPORTS) |
| 1 + d·NP + p | SA, start address of port p, direction d |
| 1 + 2NP + d·NP + p | EA, end address |
| 1 + 4NP + d·NP + p | BC, burst count (clipped to 64) |
| 1 + 6NP + d·NP + p | CA, current address |

Addresses and BC count 128-bit memory words, so that the update rule below holds as written. The
source design allows addresses up to 4 GB; here the 32-bit registers count words instead. The current
address follows `CA = SA` at the start of a transfer and `CA += BC` per granted burst while
`CA < EA`. Writing SA also loads CA. CA may also be written directly. `done` for a port and
direction is `CA ≥ EA` (or BC = 0).

Register 0 holds the number of ports in use, which can be below NP. Ports at or above it are
never polled.

**Protocol for CONTROL:**

1. Write N and, for each port, SA, EA and BC. Writing SA restarts the transfer.
2. Raise `mod_en_w[p]` / `mod_en_r[p]`.
3. Wait for `done_w[p]` / `done_r[p]`.

Before re-arming a port that is already enabled, drop its `mod_en` bit first, then write
SA/EA/BC, then raise it again. A grant may be in its second pipeline stage just as a register is
written. The register write wins, but the CA it granted may be the old one.

Every burst moves BC words. A write transfer therefore takes `ceil((EA−SA)/BC)·BC` memory words
from the MOD, which is `·128/MOD_W` of its own words. If `EA−SA` is not a multiple of BC, the last
burst runs past EA. A MOD that supplies less leaves its last burst waiting. The same rule applies
to reads.

## PHY interface

The PHY side is this design's own, in the style of an Avalon burst port, and lies on `clk`:

| Signal | Meaning |
|---|---|
| `phy_cmd.write_req` | a write beat is offered; `phy_wdata` holds it |
| `phy_cmd.read_req` | a read command is offered |
| `phy_cmd.burstbegin` | first beat of a write burst, or a read command |
| `phy_cmd.addr`, `.size` | word address and burst length (1–64) |
| `phy_ready` | the PHY accepts the offered command or beat this clock |
| `phy_rdata`, `phy_rdata_valid` | read data, in command order, one word per clock when valid |

Only one of `write_req` / `read_req` is ever set (checked by an assertion). Commands and beats hold
steady until accepted. The PHY may stall with `phy_ready = 0` at any time.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `NPORTS` | 32 | top, interface, config, arbiter: ports built |
| `MOD_W` | 32 | top, interface: MOD word width (all ports alike) |
| `AW` | 7 | top, interface: FIFO depth 2**AW memory words |
| `PHY_W` | 128 | package: 32-bit DDR at 300 MHz double data rate = 128 bits per 150 MHz clock |
| `MAX_BC` | 64 | package: largest burst |
| `ADDR_W` | 32 | package: address width |

## Where this departs from the source design

* **PHY handshake**: invented here (see above). The original connects to a vendor DDR3 PHY.
* **Per-port data widths**: the original lets every port have its own width. Here one `MOD_W`
  covers all ports, though `dcdwff` itself takes any pair of widths.
* **FIFO depths**: not given by the source. The port FIFOs hold 128 memory words, two full
  bursts. The request FIFOs hold 32 records, one per port.
* **Completion check**: the source compares CA with EA inside PRE for the polled port. Here each
  port has its own comparator in CONFIG, and PRE reads the result. The behaviour is the same.
* **Read readiness**: the source only calls it port availability. Here a read port is ready when
  its read FIFO has room for one burst.
* **Scheduler details**: the idle clock between windows, reads first after reset, and the
  rule "other direction first" at a window's end are choices made here.
* **Register map**: the order and addresses of the registers are this design's own.
* **End of a transfer**: in the source, a port's enable bit drops once CA ≥ EA. Here the
  application's `mod_en` bits are left alone, and PRE masks them with `done`.
* **When a read counts as complete**: the source gives two answers. One is "when all its data
  are buffered"; the other is "when its first word arrives". Here the FLAG is re-armed after the
  last word. The first word is reported separately as `rd_first`.
* **Performance**: the source reports 93.2 % bandwidth efficiency at N = 32, BC = 64 on real
  DDR3. The included PHY model is crude, with fixed turnaround and same-bank penalties. The
  testbenches check function, count events and show efficiency trends (see the workloads
  below). They do not reproduce the source's efficiency figures, LUT counts or timing at
  150 MHz.

## Assertions

* `dcdwff`: no write while full.
* `mpmc_port`: no read word dropped.
* `mpmc_req_fifo`: no overflow.
* `mpmc_pre`: SET only for a port that is in flight.
* `mpmc_wctrl`: write data are present during a burst.
* `mpmc_pos`: never both directions at once.

All assertions are disabled during reset.

## Verification

Each part has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_dcdwff` | 32→128 and 128→32 bits on unrelated clocks; random traffic against a queue model; flags and levels |
| `tb_mpmc_config` | register map, read-back, clipping, the CA update rule, `done`, lookup latency |
| `tb_mpmc_pre` | grant conditions, FLAG clear/set, record contents, at most one request per port |
| `tb_mpmc_wctrl` | burst beats, back-to-back bursts, PHY stalls, `trans_done` |
| `tb_mpmc_rctrl` | command issue, routing of returned words to ports, completion |
| `tb_mpmc_pos` | the window example above; window sizes, turnarounds and order against a model |
| `tb_mpmc_interface` | MOD ↔ memory-word paths of several ports, readiness bits |
| `tb_mpmc_arbiter` | PRE + POS with a model of CONFIG and the PHY |
| `tb_mpmc_top` | full controller at default parameters (32 ports, each on its own clock), PHY model with stalls, turnaround and bank penalties |
| `tb_mpmc_bank` | workload: 4 ports, three bank maps, BC = 4…64; data checks and efficiency trends |
| `tb_mpmc_sweep` | workload: 32 ports built, N = 2…32 used, BC = 4…64, plus write-only and read-only runs; data checks, unused ports idle, efficiency trends |

`tb_mpmc_top` does two things:

* It writes data from every MOD to memory and checks every memory word.
* It reads preloaded and freshly written regions back into the MODs and checks every word.

It also counts each mechanism and fails if any count stays zero:

* MOD-side FIFO full;
* a read request held back for lack of FIFO room;
* read windows, write windows, and windows with more than one request;
* bus turnarounds;
* PHY stalls and bank conflicts;
* FLAG sets;
* first-word events.

### Workloads: bank maps and port counts

The two workload testbenches run the controller against a memory model in which reads and writes
share one data bus. The model holds `ready` low in two cases: for 6 clocks when the bus changes
direction, and for 8 clocks when a burst goes to the same bank as the one before it. These
numbers are made up. What the tests show is how the controller reacts to such costs, not DDR3
performance.

`tb_mpmc_bank` puts four ports into banks in three ways:

* all four ports in one bank (EXPA);
* two ports in each of two banks (EXPB);
* one bank per port (EXPC).

Each port writes 512 words and reads 512 others at the same time. One run printed:

```
efficiency (words moved per clock), BC = 4 8 16 32 64:
  EXPA  0.320 0.548 0.720 0.838 0.913
  EXPB  0.552 0.781 0.877 0.906 0.966
  EXPC  0.552 0.781 0.877 0.935 0.966
```

Spreading ports over banks pays off most at short bursts. There, a bank wait per burst costs as
much as the burst itself. The testbench fails if the maps' order ever reverses, or if long
bursts are not better than short ones.

`tb_mpmc_sweep` keeps all 32 ports built and enables the first N. Each used port moves 256 words
each way. Timing starts at the first command the memory accepts:

```
  N= 2  0.466 0.555 0.783 0.839 0.938
  N= 4  0.554 0.714 0.878 0.936 0.968
  N= 8  0.779 0.874 0.935 0.967 0.984
  N=16  0.876 0.933 0.965 0.983 0.992
  N=32  0.934 0.965 0.982 0.991 0.996
```

More ports mean fuller windows, so fewer turnarounds per word moved. With few ports, the round
trip is what limits the rate: request, burst, `trans_done`, FLAG set, next poll. Each port may
have only one burst in flight per direction.

The same testbench also runs write-only and read-only traffic at N = 2, 4, 8 and BC = 16, 32, 64.
There are no turnarounds then, and it checks that each direction alone is at least as efficient
as mixed traffic. In this model writes come out slightly below reads at small N, for two reasons:

* a write burst can only be requested once the port's FIFO already holds the whole burst;
* the next write window cannot open before the previous one has finished its last beat.

The DRAM-level reasons why real writes cost more than reads are not modelled.

### Running

To run one, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/mpmc_pkg.sv $(ls rtl/*.sv | grep -v mpmc_pkg) \
          tb/mpmc_phy_model.sv tb/tb_mpmc_top.sv --top-module tb_mpmc_top -Mdir obj_top
./obj_top/Vtb_mpmc_top
```

The package comes first. `-Wno-fatal` keeps width warnings from stopping the build. Those warnings come from testbenches that shrink `NPORTS`, where 5-bit port indices select into narrower vectors. Unit testbenches need only the files they instantiate, though listing all of `rtl/` also works.
