# ControlPULPlet-style real-time controller chiplet: RTL

A large processor die needs a small, always-on controller that watches its
temperature, power and voltage sensors and sets clocks and voltages in
closed loop (DVFS). In a 2.5D package, that controller can be its own
chiplet next to the controlled die. The two then talk over a short
die-to-die (D2D) link instead of an on-chip bus.

This repository is synthesizable SystemVerilog for the digital part of such
a controller, following the ControlPULPlet architecture. It contains:

* the manager-domain memory system and interconnect;
* the interrupt and mailbox machinery that makes it a real-time controller;
* a DMA that can fetch sensor data periodically without the processor;
* a complete D2D link, from AXI4 down to the double-data-rate pins.

The processor core is not included. Its bus and interrupt ports are
top-level ports of `control_pulplet`.

Two ideas carry the design:

1. **The controlled chip is reached through one 64-bit AXI4 port.** A
   static bypass setting sends that port either to native AXI pins (both
   dies on one substrate with a wide bus) or through the D2D link (few
   wires). Software sees the same address map either way.
2. **Periodic work needs no processor time.** A real-time DMA mid-end
   relaunches a programmed multi-dimensional transfer every PERIOD cycles.
   For example, it reads 500 sensor registers every 250 µs. The core only
   gets a "done" interrupt.

## Block map

```
                core instr / data / shadow (OBI)      interrupt request/ack
                          |                                   ^
   +----------------------v-----------------------------------|------------+
   |                 32-bit OBI crossbar (2-cycle)          CLIC (128)     |
   |   managers: core x3, AXI->OBI bridge, DMA                ^            |
   |   subordinates:                                          | lines      |
   |     L2 bank 0..3 (512 KiB, word interleaved)             |            |
   |     mailboxes (64 x 32 B) -------------------------------+ 0..63      |
   |     timer 0, timer 1, PWM -------------------------------+ 64..66     |
   |     DMA mid-end registers -------------------------------+ 67         |
   |     CLIC registers                        ext_irq_i -----+ 68..99     |
   |     OBI->AXI bridge (0x8000_0000 and up)                              |
   |            |                 DMA back-end (AXI <-> OBI)               |
   |            v                       v                                  |
   |         AXI arbiter (round-robin, 1 write + 1 read in flight)         |
   |            |                                   ^                      |
   |      bypass (USE_D2D) ------------+        AXI->OBI bridge            |
   |       |                           |            ^                      |
   |   native m_axi/s_axi        D2D link (network | data link | router |  |
   |                             CH x PHY)  --- CH fwd clocks + CH*LN lanes|
   +-----------------------------------------------------------------------+
```

## Address map (this design's choice)

| Region | Base | Size / layout |
|---|---|---|
| L2 scratchpad | `0x1C00_0000` | 512 KiB, word `i` in bank `i mod 4` |
| Mailboxes | `0x1A10_0000` | mailbox `m` at `+64*m`: words 0..7 message, word 8 doorbell |
| Timer 0 / 1 | `0x1A10_B000` / `0x1A10_C000` | CTRL, COUNT, CMP, PRESC |
| PWM timer | `0x1A10_D000` | CTRL, PERIOD, DUTY, COUNT |
| DMA mid-end | `0x1A10_E000` | see below |
| CLIC | `0x1A20_0000` | one control word per line at `+4*i` |
| Controlled chip | `0x8000_0000` and up | through the OBI-to-AXI bridge |

Other addresses are answered with zero data and never hang the bus.

## The die-to-die link (`cpl_d2d_link`)

The link is duplex at the AXI level. On its subordinate side a local
manager sends AW/W/AR and gets B/R back. On its manager side, requests from
the other die are replayed towards a local subordinate. Both sides share one
packet stream in each direction. Two identical link instances, one per die,
face each other; the wires are point to point.

### Network layer (`cpl_d2d_network`)

Every AXI beat becomes one packet:

```
 {hdr[3:0], payload[72:0], b_valid, b[5:0], crd[CRD_W-1:0]}
```

* `hdr` names the channel: 0 = none, 1 = AW, 2 = W, 3 = AR, 4 = R.
* The payload is as wide as the widest channel, which is W (64 data bits,
  8 strobe bits and `last`).
* A pending B response is carried along with any packet, so it needs no
  packet of its own.
* `crd` returns receive-buffer slots freed since the last packet.

With 128 credits the packet is 92 bits.

**Choosing what to send.** AW and AR take priority over W and R. Each pair
alternates round-robin. Next comes a packet with only a B response, then a
packet with only credits.

**Credit rules:**

* A packet that carries a beat or a B response uses one slot in the far
  receive FIFO, so it costs one credit.
* When the credit counter is zero, such packets wait. That wait
  back-pressures the AXI channels. `crd_stall_o` shows it.
* A credit-only packet costs nothing, so returning credits can never
  deadlock.

**Transaction limits.** Only one write and one read per direction are in
flight; there are no outstanding transactions. W beats follow their own AW.
Together these rules mean the in-order receive FIFO can never hold a beat
whose address has not been taken yet.

**Latency.** Converting a beat into a packet costs one cycle, because the
packet is registered.

### Data link layer (`cpl_d2d_data_link`)

A flit is THETA = 2·CH·LN bits: what CH channels of LN lanes carry in one
cycle with both clock edges. At the default CH = 8 and LN = 8, THETA = 128,
so a 92-bit packet fits in one flit. With a single channel (CH = 1), a
packet is cut into ceil(PKT_W/16) flits and put back together on receive.

The returned-credit field of a received packet is passed to the network
layer at once. The packet itself goes into the flow-control FIFO, which
holds CRD packets (CRD = 128 by default). Credit-only packets are dropped
after their credits are read.

### Channel router (`cpl_d2d_chan_router`)

This block has no logic gates. On transmit, channel `c` carries flit bits
`[c*2LN +: 2LN]`. On receive, a flit is complete only when every channel's
FIFO has an entry, and then all channels are popped together. That keeps
the channels aligned even if their forwarded clocks arrive with different
skews.

### PHY (`cpl_d2d_phy_tx`, `cpl_d2d_delay_line`, `cpl_d2d_phy_rx`)

Each channel forwards its own clock next to its LN data lanes. The link
therefore uses Nwrs = CH·2·(LN+1) = 144 wires at the default size.

**Transmit:**

* A clock-gate cell (a latch open while the clock is low, ANDed with the
  clock) makes the forwarded clock toggle only in cycles that carry a flit.
  Gating costs one cycle.
* A clock multiplexer sends bits `[LN-1:0]` while the clock is high and
  bits `[2LN-1:LN]` while it is low.
* The gated clock passes through a delay line set to a quarter period and
  then an inverter. The forwarded clock therefore lags by 270°: its falling
  edge is in the middle of the first half-cycle and its rising edge in the
  middle of the second.
* The forwarded clock rests high when the link is idle.

**Delay line.** `cpl_d2d_delay_line` is a *behavioural model*: a chain of
`#TAP_DELAY` taps selected by `dly_sel_i`. In silicon this is a tree of
multiplexers whose delay depends on the process, so the model stands in for
a hand-placed cell. The testbenches use a 20-unit clock, so 5 taps of 1
unit give the quarter period.

**Receive:**

* The lanes are sampled on the falling edge of the received clock (low half
  of the flit) and on the rising edge (high half).
* On the rising edge the whole flit is written into an 8-entry
  asynchronous FIFO.
* Its Gray-coded write pointer crosses into the local clock through two
  flip-flops.

The FIFO has no full flag. The forwarded clock stops when the link is idle,
so a full flag could never be released. Credit flow control and a reader
that drains every cycle keep the FIFO nearly empty.

### Measured behaviour (CH=8, LN=8; CRD=128 unless stated)

* AW leaves the near AXI port and appears at the far manager port within 8
  cycles.
* A 256-beat (2 KiB) write burst takes 272 cycles from AW to B, so W beats
  use about 94 % of the cycles.
* How many credits are enough depends on the round trip. With short wires
  and a fast memory, 16 credits already give the full rate (a 2 KiB read
  in 270 cycles); 8 credits give about 60 % of it (425 cycles). With
  50-cycle wires and a 100-cycle memory behind the far die, a 2 KiB read
  takes 469 cycles with 128 credits and 3724 cycles with 8. The sender
  idles most of the time waiting for credits to come back.
* The theoretical duplex peak is 2 · f · THETA. At 200 MHz that is
  51.2 Gbit/s.
* When the manager reading a 2 KiB burst holds off the R beats for 300
  cycles, the far receive buffer fills, the sending side runs out of
  credits and stalls, and the transfer resumes with no data lost.

## Periodic DMA (`cpl_rt_midend` + `cpl_dma_backend`)

### Mid-end

Software programs a transfer of up to three dimensions once:

* an inner contiguous run of LEN bytes;
* repeated REPS2 times with source/destination strides S2/D2;
* that plane repeated REPS3 times with strides S3/D3.

Registers, as word offsets from `0x1A10_E000`:

| Offset | Register |
|---|---|
| `0x00` | SRC |
| `0x04` | DST |
| `0x08` | LEN (bytes) |
| `0x0C` | REPS2 |
| `0x10` | S2 |
| `0x14` | D2 |
| `0x18` | REPS3 |
| `0x1C` | S3 |
| `0x20` | D3 |
| `0x24` | PERIOD (cycles) |
| `0x28` | NPERIODS |
| `0x2C` | CTRL: bit 0 start, bit 1 stop, bit 2 direction (1 = L2 to external), bit 3 periodic |
| `0x30` | STATUS: bit 0 busy, [15:8] overruns, [31:16] launches |

**Launching:**

* Writing CTRL with start launches the transfer at once.
* With the periodic bit set, the transfer is relaunched every PERIOD
  cycles. NPERIODS counts all launches, the first included; 0 means run
  until stopped.
* If a relaunch falls due while the previous transfer is still running, it
  is skipped and counted as an overrun.

Each launch is flattened into REPS2·REPS3 one-dimensional jobs. The first
job reaches the back-end one cycle after the launch. When the last job
completes, `done` raises CLIC line 67.

### Back-end

The back-end moves one job at a time between the 64-bit AXI port and the
32-bit OBI bus, through a 16-entry buffer of 64-bit words:

* A burst is at most 256 beats and never crosses a 4 KiB page.
* On the OBI side, each 64-bit word becomes two 32-bit accesses.
* Addresses and lengths must be multiples of 8 bytes; an assertion checks
  this.

It keeps only one burst in flight. The published design has a full-featured
DMA with several outstanding transactions, so this back-end is slower. It
is the main simplification in this RTL.

## Interrupts and mailboxes

**CLIC (`cpl_clic`).** There are 128 lines. Each line has a control word at
`0x1A20_0000 + 4*i`, laid out like the RISC-V CLIC draft:

| Bits | Field |
|---|---|
| 0 | pending |
| 8 | enable |
| 16 | hardware vectoring (SHV) |
| 18:17 | trigger (01 = rising edge, else level) |
| 31:24 | level |

**Selection:**

* Each cycle, the CLIC picks the pending, enabled line with the highest
  level. Equal levels go to the higher line number.
* If that level is above the core's threshold input, the CLIC presents the
  id, level and SHV bit to the core one cycle later.
* The core answers with `irq_ack_i` and the id it took; this clears an
  edge-triggered line's pending bit.

**Mailboxes (`cpl_mailbox`).** There are 64 mailboxes of 32 bytes:

* Either side writes a message and then sets the doorbell.
* Each doorbell drives its own CLIC line (0..63).
* The line stays high until the receiver writes 0 to the doorbell.

In the end-to-end test, the controlled chip writes a message through the
D2D link, rings doorbell 5, and the core sees interrupt 5 at level 0x80.

## Interconnect, memory and bridges

**Crossbar (`cpl_obi_xbar`).**

* Each subordinate is selected by `(addr & mask) == base`. The same rule
  form gives the L2 its word interleaving.
* Each subordinate has a round-robin arbiter over the managers asking for
  it.
* The id of each granted manager is queued so that responses go back to
  the right manager.
* A manager may send several requests to one subordinate but must wait for
  its responses before switching to another. This keeps responses in order.

Responses are registered. A one-cycle memory therefore answers in exactly
two cycles from request to data, the access latency the architecture is
built around. The end-to-end test measures it.

**L2 banks (`cpl_l2_bank`).** Each bank is a register array with byte
enables and one-cycle reads. In silicon it becomes an SRAM macro.

**Bridges:**

* `cpl_obi2axi` turns each core access above `0x8000_0000` into a
  single-beat 4-byte AXI transaction in the correct 32-bit lane.
* `cpl_axi2obi` turns incoming AXI bursts into OBI word accesses: two per
  8-byte beat, and words with no strobes are skipped. It serves writes
  before reads.

**AXI arbiter (`cpl_axi_mux`).** It merges the DMA and the core bridge onto
the outgoing port. It alternates between them when both wait, and holds the
write and read paths for one transaction each.

## Timers and PWM

**Timers (`cpl_timer`).** Two 32-bit timers. Each fires a one-cycle
interrupt every (CMP+1)·(PRESC+1) cycles.

**PWM (`cpl_pwm_timer`).**

* It counts 0..PERIOD-1 and drives `pwm_o` high while the count is below
  DUTY.
* It interrupts once per period.
* New PERIOD and DUTY values take effect at the next period boundary.

## What is not in this RTL

These parts are outside the RTL; the top level exposes their ports instead:

* **CV32RT core.** The core is an existing design with fast-interrupt
  extensions (interrupt latency as low as 6 cycles, background context
  save). Its instruction, data and shadow (context-save) OBI ports and its
  CLIC interface are top-level ports.
* **Accelerator cluster and its L1 memory.** The 8-core cluster and its L1
  memory connect through AXI ports that this top does not have.
* **I/O DMA and slow peripherals** (32 GPIO, UART, 12 I2C, 8 SPI). Their
  interrupts come in on `ext_irq_i` (CLIC lines 68..99).
* **FLLs and pads.** These are analog parts or library cells.
* **Configuration registers of the D2D link.** The delay-line tap select is
  a top-level port.

## Departures and choices to be aware of

* All register maps, the address map and the interrupt line numbers are
  this design's own.
* The DMA back-end keeps one burst in flight (see above).
* The periodic mid-end is a set of nested counters and a period counter.
  The published mid-end is described as a microcoded controller with a
  programmable sequencer and loop flattening. It does the same job for
  transfers of up to three dimensions, but it is not programmable beyond
  its registers. It is attached to the system DMA only, because the I/O
  DMA is not part of this RTL.
* The PHY delay line is a behavioural model with `#` delays. It shows how
  the quarter-period shift works, but in silicon it must be a hand-placed
  multiplexer tree.
* In D2D mode the native AXI ports are tied to zero; in native mode the D2D
  pins are. This is the static bypass, so one of the two port groups is
  always idle.
* The PHY receive FIFO has no full flag (see the PHY section).
* Only one write and one read cross the link in each direction at a time,
  as the published design specifies. This bounds the link's throughput for
  short bursts.

## Verification

All testbenches check themselves and end with a line
`TB_RESULT checks=<n> failures=<m>`.

| Testbench | Covers |
|---|---|
| `tb_cpl_d2d_link` | Two link pairs: CH=8/CRD=128 and CH=1/CRD=8 with a slow memory. Bursts of 1 to 256 beats, data integrity, AW latency, write utilisation, credit stall, all credits returned at the end. |
| `tb_d2d_crd_sweep` | Bursts of 8 B to 2 KiB, write and read, at CRD = 8, 16, 32, 64 and 128 with no wire delay, then CRD = 8 and 128 with 50-cycle wires and a 100-cycle memory. It prints utilisation per size and checks that more credits are never slower. |
| `tb_cpl_mailbox` | All 64 mailboxes: messages, partial writes, doorbell lines, one-cycle response. |
| `tb_cpl_clic` | 400 random input patterns against a reference arbiter; edge mode; ack; software clear. |
| `tb_cpl_timer`, `tb_cpl_pwm_timer` | Interrupt periods and PWM duty, to the cycle. |
| `tb_cpl_rt_midend` | 3-D address sequence, exact period spacing, NPERIODS, overruns, stop. |
| `tb_cpl_dma_backend` | Both directions, 4 KiB page splits, 256-beat limit, random OBI stalls. |
| `tb_cpl_axi_mux` | Two managers contending; routing of B and R; fairness. |
| `tb_cpl_obi_xbar` | Three managers, four L2 banks, a slow subordinate, a hole; 2-cycle latency; interleaving. |
| `tb_cpl_adapters` | OBI→AXI→OBI round trip with byte enables; AXI bursts into OBI. |
| `tb_control_pulplet` | The whole chiplet at default parameters against a far link and a behavioural controlled chip: remote firmware load, instruction fetch, mailbox interrupt, timer/PWM, core access through the link, periodic gather of 500 × 8-byte sensor registers every 125 000 cycles, page-crossing scatter, DMA overrun, credit stall, external interrupt. Each of these mechanisms is counted. |
| `tb_control_pulplet_native` | The same chiplet with the bypass set to native AXI. |

With the default 20-unit clock, the full-size gather finishes 3195 cycles
after each launch, 2.6 % of the 250 µs period at 500 MHz.

### Running with Verilator

Every file in `rtl/` is compiled, the package first, together with the testbench and its
behavioural helpers (`tb_axi_mem`, `tb_axi_master`, `tb_d2d_pair`):

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/cpl_pkg.sv $(ls rtl/*.sv | grep -v cpl_pkg) tb/tb_axi_mem.sv tb/tb_axi_master.sv \
  tb/tb_control_pulplet.sv --top-module tb_control_pulplet
./obj_dir/Vtb_control_pulplet
```

Replace the last testbench file and the top module name to run any other
testbench; `tb_cpl_d2d_link` also needs `tb/tb_d2d_pair.sv`, and `tb_d2d_crd_sweep`
needs `tb/tb_d2d_sweep_point.sv`. The full-size
run takes about half a minute.

### Parameters worth changing

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `control_pulplet` | `USE_D2D` | 1 | Bypass: 1 = D2D link, 0 = native AXI. |
| `control_pulplet` / `cpl_d2d_link` | `CH`, `LN` | 8, 8 | Channels and lanes per channel. |
| `control_pulplet` / `cpl_d2d_link` | `CRD` | 128 | Credits, the receive FIFO depth in packets. |
| `control_pulplet` / `cpl_d2d_link` | `NTAPS`, `TAP_DELAY` | 16, 1 | Delay-line model. |
| `control_pulplet` | `L2_BYTES`, `NB` | 512 KiB, 4 | L2 size and bank count. |
| `control_pulplet` | `NUM_MBOX`, `NUM_IRQ` | 64, 128 | Mailboxes and CLIC lines. |

The small-chip configuration (CH = 1, CRD = 8) is a parameter change and
is simulated in `tb_cpl_d2d_link`.
