# Low-latency RTIO event submission on a Zynq-7000 ARTIQ core device

ARTIQ runs its real-time experiment code ("kernels") on an embedded CPU, but
every signal to or from the experiment is timed by gateware, the RTIO core,
which executes events at given timestamps with sub-nanosecond precision. On a
Xilinx Zynq-7000 the kernel can run on a hard Cortex-A9 core instead of a soft
CPU in the FPGA. That CPU is much faster at computation, but reaching the FPGA
fabric (the PL) from it is slow: one access over the general-purpose AXI ports
costs about 72 CPU cycles, and submitting one RTIO event through memory-mapped
registers needs seven of them.

This RTL implements the PL side of a better path, and the two bulk engines that
share memory with it:

* **ACPKI** (kernel initiator over the ACP port). The CPU never touches PL
  registers to submit an event. It writes the event into its own cached memory
  and executes `sev`. That instruction changes the level of the PS output
  `evento`, which reaches the PL with very little delay. The PL then fetches the
  event itself through the cache-coherent accelerator port (ACP), submits it to
  the RTIO core and writes a status word back through the same port. The CPU
  polls that word in its own cache.
* **RTIO DMA** replays a recorded event sequence from DDR memory at gateware
  speed. It reads over an AXI HP port.
* **RTIO analyzer** copies every event that reaches the RTIO core, from either
  source, into a ring buffer in DDR for later inspection. It writes over a
  second HP port.

The RTIO core, the processing system (CPUs, caches, DDR controller, Ethernet)
and the firmware are not part of this RTL. The RTIO core appears as a port of
the top module, and behavioural models stand in for it and for the PS memory
ports in simulation.

```
        PS (Cortex-A9, caches, DDR)                          PL (this RTL)
  ┌───────────────────────────────┐        ┌──────────────────────────────────────────────┐
  │ kernel CPU ── sev ──> evento ─┼────────┼─> acpki ──┐                                   │
  │          ACP slave <──────────┼─ AXI ──┼── acpki   │                                   │
  │                               │        │           ├─> cri_arbiter ──> rtio_* ports ───┼──> RTIO core
  │          HP0 slave <──────────┼─ AXI ──┼── rtio_dma┘        │  ^ hold                  │
  │          HP1 slave <──────────┼─ AXI ──┼── rtio_analyzer <──┘ (every accepted event)   │
  └───────────────────────────────┘        └──────────────────────────────────────────────┘
```

## Files

| file | what it is |
|---|---|
| `rtl/artiq_pkg.sv` | event type, status bits, the in-memory event image, AXI3 channel structs |
| `rtl/acpki.sv` | the kernel initiator |
| `rtl/rtio_dma.sv` | DMA playback engine |
| `rtl/rtio_analyzer.sv` | event recorder with its ring-buffer writer |
| `rtl/sync_fifo.sv` | single-clock FIFO used by the analyzer |
| `rtl/cri_arbiter.sv` | merges the two initiators onto the RTIO interface |
| `rtl/artiq_zynq_pl.sv` | top: the four blocks wired together |
| `tb/axi_mem_model.sv` | behavioural AXI3 slave with memory (PS port + DDR) |
| `tb/rtio_core_model.sv` | behavioural RTIO core input: back-pressure, underflow, event log |
| `tb/tb_*.sv` | one self-checking testbench per block, and one for the top |

## Common conventions

**Clock and reset.** Everything runs on one clock, the RTIO clock. Time
figures below assume 125 MHz (8 ns per cycle). Reset `rst_n` is active low and
asynchronous. `evento` is taken to be already synchronised to this clock. The
PS appears to carry it across clock domains through a two-flop synchroniser of
its own, so the PL adds none. If your PS does not do this, put a synchroniser
in front of `evento`.

**RTIO event.** `rtio_event_t` is 128 bits: a 64-bit timestamp, a 24-bit
channel, an 8-bit register address and a 32-bit data word. In memory, every
block uses the same two-word image of an event:

| 64-bit word | contents |
|---|---|
| 0 | `timestamp[63:0]` |
| 1 | `{address[7:0], channel[23:0], data[31:0]}` |

**RTIO interface.** This is a valid/ready handshake. An initiator raises
`valid` with an event and holds both until `ready`. The core's verdict
`cri_status_t` (one bit: `underflow`, meaning the timestamp was already in the
past) is valid in the accepting cycle. Assertions in the initiators check that
a presented event stays stable until it is taken.

**AXI ports.** These are 64-bit AXI3 masters, bundled as two packed structs:
`axi_m2s_t` holds everything the PL drives and `axi_s2m_t` everything the PS
drives. IDs are always 0 and every burst is INCR with 8-byte beats. No burst
crosses a 4 KiB page. Response codes are not checked.

## The kernel-CPU path: ACPKI

This part departs most from a conventional design. The CPU initiates the
transfer, yet every AXI transaction is mastered by the PL.

### Protocol as seen by the CPU

The event record is 24 bytes at a fixed, cacheable address `ki_base`:

| offset | written by | contents |
|---|---|---|
| +0  | CPU  | word 0 of the event (timestamp) |
| +8  | CPU  | word 1 of the event |
| +16 | PL   | status: bit 0 = done, bit 1 = underflow |

Firmware for one submission:

```
record[0] = timestamp; record[1] = {addr, chan, data}; record[2] = 0;
dsb; sev;                          // evento changes level
while (!(record[2] & 1)) ;         // spin in cache until the PL has answered
if (record[2] & 2) raise underflow;
```

No cache flush or invalidate is needed. ACP accesses are coherent
(`AxCACHE = 4'b1111`, `AxUSER[0] = 1`), so the PL's read sees the CPU's
freshly written data and its write updates the line the CPU is polling.

### What the PL does

`acpki` is a six-state machine:

1. **IDLE**: `evento` is compared with its value one cycle earlier. Any change,
   rising or falling, starts a transaction. The first cycle after reset only
   samples the level, so a line that is already high does not cause a
   spurious submission.
2. **AR / R**: one 2-beat read burst at `ki_base` fetches words 0 and 1.
3. **SUBMIT**: the event is presented on the RTIO interface until it is
   taken, and the underflow verdict is latched.
4. **WRITE / B**: the address and data of a 1-beat write to `ki_base + 16` are
   issued together. The block returns to IDLE when the write response arrives.

If `evento` changes again while a transaction is running, one pending flag
remembers it, and the record is fetched again straight after. The firmware
must not reuse the record before it has seen `done`, and nothing else enforces
this. Two changes during one transaction count as one.

### Timing

Let L be the cycles from the read-address handshake to the first read beat,
and B the cycles from the write data to the write response. With an RTIO core
that takes the event at once, the status word is in memory **L + 6** cycles
after the `evento` change, and the block is idle again after **L + B + 6**
cycles. The testbench checks both numbers exactly with L = 8 and B = 4, which
gives 14 and 18 cycles (112 and 144 ns).

A CPU that submits the next event as soon as it sees `done` gets one event
every L + B + 6 cycles from the PL; the testbench measures 18 cycles (144 ns)
in that back-to-back loop. On the real hardware about 376 ns per event was
measured end to end, against about 725 ns for the register-based path. That
figure includes the CPU's own work and the real ACP latencies, neither of
which is modelled here, so the RTL alone cannot reproduce it.

## DMA playback: `rtio_dma`

A sequence is `n_events` event images packed back to back from `base_addr`
(16-byte aligned). A one-cycle `start` pulse plays it once, and replaying it is
simply another pulse. The engine:

* issues INCR read bursts of up to `MAX_BURST` = 16 beats (8 events), cut short
  at 4 KiB page boundaries, with up to `MAX_OUTSTANDING` = 4 bursts in flight,
  so that DDR latency is hidden behind the data of earlier bursts;
* pairs beats into events and keeps one assembled event ready for the RTIO
  interface, taking the next beat in the same cycle the current event leaves.
  If the RTIO side stalls, `r_ready` falls and the AXI read channel waits;
* when the RTIO core reports an **underflow**, it stops: no further bursts,
  drains and discards the data already requested, sets `underflow` and records
  `err_channel` and `err_timestamp`. These stay valid until the next `start`.

With an always-ready RTIO core it submits **one event every 2 cycles** (16 ns).
On the original hardware, DMA was reported to sustain one TTL event every 32 ns
while the analyzer was also recording. The testbenches check that the interval
never exceeds 4 cycles, and the top-level test measures 2.

## Event recording: `rtio_analyzer`

The analyzer taps the RTIO interface after the arbiter, so it sees exactly the
events the RTIO core accepted, from both initiators, in order.

* Each accepted event enters a `FIFO_DEPTH` = 64-entry FIFO.
* A writer empties the FIFO in write bursts of up to `MAX_BURST_EVENTS` = 8
  events (16 beats). It does not wait for each write response; up to
  `MAX_OUTSTANDING` = 4 may be pending. A burst never runs past the end of the
  buffer or across a 4 KiB page. One burst of n events takes 2 + 2n cycles, or
  2.25 cycles per event at n = 8.
* The buffer is `buf_events` entries from `base_addr` (4 KiB aligned). When
  the write pointer reaches the end it wraps to 0 and `wrapped` is set, so the
  buffer holds the most recent `buf_events` events. Entry
  `(wr_ptr - 1) mod buf_events` is the newest. `clear`, given while idle,
  restarts at entry 0. `n_stored` counts all events written.
* **No event is ever dropped.** While the FIFO is full, `ready` is low and the
  arbiter presents nothing to the RTIO core, so the initiators wait. The top
  brings this state out as `ana_holding`. If capture is disabled (`enable`
  low), nothing is recorded and nothing is held.

Under DMA at full rate the analyzer is slightly slower than the DMA engine
(2.25 against 2 cycles per event). After several hundred events the FIFO can
fill, and the DMA then runs at the analyzer's pace, still well under 4 cycles
per event. A slow HP port holds the initiators for longer. The top-level test
shows this with a throttled port.

## Arbitration: `cri_arbiter`

The kernel initiator (index 0) and the DMA (index 1) share the RTIO interface.
The arbiter grants in round-robin order among the initiators presenting an
event. Once an event is shown to the RTIO core it stays granted until taken, so
the core sees a stable event. The verdict goes back to the initiator served.
`hold` (from the analyzer) blocks all grants. The datapath is combinational, so
an event can pass from an initiator to the RTIO core in the cycle it is
presented.

A kernel submission made during a DMA playback is therefore slotted in between
two DMA events. It is not delayed until the sequence ends. Timestamps are not
reordered; that is the RTIO core's business.

## Top level: `artiq_zynq_pl`

The top has no parameters. Its port groups:

| group | ports |
|---|---|
| kernel path | `evento`, `ki_base`, `ki_busy`, `ki_n_events`, `acp_o`/`acp_i` |
| DMA | `dma_start`, `dma_base`, `dma_n_events`, `dma_busy`, `dma_underflow`, `dma_err_channel`, `dma_err_timestamp`, `dma_events_done`, `hp0_o`/`hp0_i` |
| analyzer | `ana_enable`, `ana_clear`, `ana_base`, `ana_buf_events`, `ana_wr_ptr`, `ana_wrapped`, `ana_n_stored`, `ana_busy`, `ana_holding`, `hp1_o`/`hp1_i` |
| RTIO core | `rtio_valid`, `rtio_event`, `rtio_ready`, `rtio_status` |

The control inputs and status outputs are meant to be configuration registers
written and read by the PS over its general-purpose AXI port. That register
bank is not included: wrap the top with your own.

After synthesis (coarse, yosys) the top has about 310 word-level cells, 720
flip-flop bits and one 64 × 128-bit memory (the analyzer FIFO).

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. The models randomise back-pressure with `$urandom`. To run one, for
example the top:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps --top-module tb_artiq_zynq_pl \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/artiq_pkg.sv tb/tb_artiq_zynq_pl.sv
./obj_dir/Vtb_artiq_zynq_pl
```

| testbench | what it establishes |
|---|---|
| `tb_acpki` | events arrive intact; both `evento` edges trigger; underflow bit; exact L + 6 / L + B + 6 cycle counts; a change during a transaction is served; back-to-back interval within 47 cycles (376 ns); no spurious transaction |
| `tb_rtio_dma` | order and contents over a 4 KiB page edge; burst rules; repeated playback; interval ≤ 4 cycles, average 2; random RTIO back-pressure; stop, drain and report on underflow; restart afterwards |
| `tb_rtio_analyzer` | no holding at DMA rate; holding without loss on a stalling port; ring contents after wrap; burst rules; disable; clear |
| `tb_cri_arbiter` | per-initiator order and verdicts under random stalls and holds; nothing presented while held; alternating grants |
| `tb_artiq_zynq_pl` | the whole design at its default parameters: kernel submissions (both edges, one late), 64-event DMA at ≤ 4 cycles per event with the analyzer on, DMA and kernel at once, 200 events into a throttled analyzer, DMA underflow stop, and finally every accepted event checked in the analyzer ring. It counts each mechanism and fails if any never happened. |

The memory model answers reads after a fixed latency (8 to 12 cycles in the
tests) and accepts W beats only after their address. The RTIO model's clock
advances 8 ns per cycle and it flags an underflow when `timestamp < now`.
Neither is cycle-accurate to a real Zynq. They check protocol and function,
not absolute performance.

## Where this RTL goes beyond, or departs from, the published description

The published description says what ACPKI, DMA and analyzer do, and which
Zynq ports they use. It does not give their internals. Everything below is
this design's choice:

* the event width and memory image, the ACPKI record and status layout;
* the RTIO interface handshake and the single underflow status bit (the real
  ARTIQ interface also has input events and further status bits; input
  events, that is reading timestamps back from input channels, are not
  supported here);
* burst sizes, outstanding limits, FIFO depth, ring-buffer control;
* stop-on-underflow in the DMA, and back-pressure instead of loss in the
  analyzer;
* round-robin arbitration. In ARTIQ itself a register selects which initiator
  owns the RTIO core;
* DMA and analyzer on separate HP ports;
* the control interface as plain ports instead of a register bank.

One inconsistency in the source: it says the ACPKI reads "the PL memory",
and also that the ACP gives the PL a view into the PS memory. The record lives
in PS memory here, which is the only reading under which the cache-coherence
argument holds.

Not covered here: the register-based initiator the ACPKI replaces, and the
suggested follow-up of a multi-entry event FIFO with a credit counter in the
CPU cache. Both are mentioned only as comparison or future work.
