# Spike timestamp detector and synchronous stimulus output

Closed-loop neuroscience experiments record spikes from neurons and change
the stimulus shown to the animal depending on those spikes. Only the time of
each spike matters, and it must be known to the microsecond. A general-purpose
computer cannot timestamp pulses that precisely. Even under a real-time
operating system its interrupt latency varies by far more than a microsecond.

This RTL moves the time-critical parts into an FPGA and leaves the rest to
software. The hardware stamps every spike pulse with a 32-bit microsecond
timestamp at the moment it arrives. It keeps the stamped events in a
block-RAM FIFO until the host reads them. The host's real-time driver may be
late by tens of microseconds, and the recorded times stay exact anyway.

Stimulus output works the same way in reverse. The host writes stimulus
samples ahead of time into a small FIFO. A hardware sync pulse from the
stimulus generator moves the next sample to the output pins at a time the
hardware decides, not the software. Each of these moves also interrupts the
host, so it can compute and send the following sample. That sample may
depend on the spikes it has just read, which closes the loop.

The design targets a Cyclone IV FPGA on a board that has an Atom host
attached over PCI Express. The host reaches the FPGA through a vendor
PCIe-to-Avalon bridge. This code describes only the FPGA logic behind that
bridge. It is small: after coarse synthesis it has about 170 word-level
cells, 367 flip-flops and one 64 Kbit memory.

## Block structure

```
 spike_in[31:0] ─► digital_in_sync ─ch_rise─► sync_logic_control ─cnt_clr/cnt_inc─► clock_counter
 stim_sync_in ───► digital_in_sync ─sync_rise─►      │  │  │                           │ timestamp[31:0]
                                                flags│  │ev_wr                        │
                                                     ▼  ▼                             ▼
                                                   event_packer  ◄─────────────────────┘
                                                        │ 64-bit {flags, timestamp}
                                                        ▼
                                                    bram_fifo ──► buffer_watchdog (event) ─┐
                                                        │                                  │ ledr[1:0]
                      stim_deq ──────────────┐          ▼                                  │
                                             ▼      host_regs ◄──► Avalon-MM slave, irq    │
 stim_out[7:0] ◄──────────────────────── stim_fifo ◄────┘ (samples written by host)        │
                                             └──► buffer_watchdog (stimulus) ── ledr[3:2] ─┘
```

| Module | Role |
|---|---|
| `neuro_pkg` | Widths (32-bit timestamp, 32-bit flags, 64-bit event, 8-bit stimulus), the `event_t` struct, register addresses |
| `digital_in_sync` | Two-flop synchronizer and rising-edge detector, one per input line |
| `sync_logic_control` | 1 µs time base, per-microsecond flag collection, counter control, FIFO write strobe, stimulus dequeue |
| `clock_counter` | 32-bit microsecond counter |
| `event_packer` | Registers `{flags, timestamp}` as one 64-bit word |
| `bram_fifo` | Block-RAM event FIFO with a fall-through output |
| `stim_fifo` | Two-entry stimulus FIFO and the output register behind `stim_out` |
| `buffer_watchdog` | Sticky overflow/underrun flags, red LEDs and an error counter, one instance per FIFO |
| `host_regs` | Avalon-MM register file and interrupt |
| `neuro_ts_top` | Connects all of the above |

## Time base and event words

This is the part that decides what a timestamp means.

`sync_logic_control` divides the clock by `CLK_PER_US` (50 at the default
50 MHz) and so splits time into microsecond slots. During a slot it ORs
every channel's rising edge into a 32-bit flag register. In the last clock
cycle of the slot, if at least one flag is set, it raises `ev_wr`. Edges
that arrive in that same last cycle are included. On that clock edge two
things happen together:

* `event_packer` captures the flags and the counter value.
* `clock_counter` steps to the next microsecond.

Because the counter is a register, the captured value is the microsecond
that is just ending. Slots without activity produce no word, so the FIFO
holds only events. The resulting behaviour:

* **Resolution.** A timestamp `T` means "one or more of the flagged channels
  had a rising edge between `T` and `T+1` µs after the start of the
  acquisition". The delay through the synchronizer (3 clock cycles) moves
  an edge at most 60 ns later into the slot, or into the next slot if the
  edge came within 60 ns of the boundary.
* **Merging.** Several channels that fire in the same microsecond share one
  word, with several flag bits set. Two pulses on the same channel in the
  same microsecond give a single flag. At most one word is written per
  microsecond, so the worst-case FIFO write rate is 1 word/µs.
* **Latency.** A word reaches the FIFO output two clock cycles after the end
  of its microsecond. The host sees `irq` rise at the same moment.
* **Start and stop.** When `CONTROL[0]` rises, the counter is cleared, and
  the slot sequence starts at 0 on the next clock. While `CONTROL[0]` is
  low, nothing is recorded, the counter holds its value, and sync pulses
  are ignored. Edges already collected in an unfinished slot are dropped
  when acquisition stops.
* **Wrap.** The counter wraps after 2^32 µs, which is about 71.6 minutes.
  The host must extend the timestamps in software if a run lasts longer.

A pulse is seen if it stays high for at least one clock cycle and then low
for at least one. The event word layout is set in `neuro_pkg::event_t`:
flags in bits 63:32 and the timestamp in bits 31:0. Bit *i* of the flags is
input `spike_in[i]`.

## Stimulus path

The host writes samples to `STIM`, and they enter `stim_fifo`, which holds
two samples. A rising edge on `stim_sync_in` does three things:

* It dequeues the oldest sample into the output register. The new value
  appears on `stim_out` at most 3 clock cycles after the edge reaches the
  pin (two synchronizer flops, then the output register).
* It sets the stimulus request bit `STATUS[1]`, which raises `irq`.
* The host's handler then writes one new sample and acknowledges the
  request.

With two samples written before the start, the host always has a full sync
period to produce the next one. If a sync arrives while the FIFO is empty,
the output keeps its old value and the stimulus watchdog records an
underrun. A write to a full FIFO is dropped and recorded as an overflow.

## Host interface

`host_regs` is an Avalon-MM slave. It has 32-bit data, 8 word addresses, no
wait states and a fixed read latency of one cycle: `readdatavalid` and the
data come one clock after `read`.

| Addr | Name | Access | Content |
|---|---|---|---|
| 0 | FLAGS | R | flags of the oldest event, 0 if the FIFO is empty |
| 1 | TSTAMP | R | timestamp of the oldest event, 0 if empty; **the read removes the event** |
| 2 | STATUS | R | [0] event waiting, [1] stimulus request, [2] stim FIFO full, [3] stim FIFO empty, [4] running, [5] event overflow seen, [6] event underrun seen, [7] stim overflow seen, [8] stim underrun seen |
| 3 | CONTROL | RW | [0] acquisition enable, [1] interrupt enable |
| 4 | STIM | W | [7:0] stimulus sample to enqueue |
| 5 | IRQACK | W | [0] clear stimulus request, [1] clear both watchdogs |
| 6 | LEVEL | R | number of words in the event FIFO |
| 7 | WDOG | R | [31:16] stimulus watchdog count, [15:0] event watchdog count |

The interrupt is a level signal, `irq = CONTROL[1] & (event waiting |
stimulus request)`. An interrupt handler runs this sequence:

1. Read STATUS.
2. While STATUS[0] is set, read FLAGS and then TSTAMP. Always read FLAGS
   first, because reading TSTAMP removes the event.
3. If STATUS[1] is set, write the next sample to STIM.
4. Write 1 to IRQACK.

If a stimulus request and an acknowledge arrive in the same clock cycle, the
request wins, so no request is lost.

## Buffer watchdogs and LEDs

Each FIFO reports a write it had to drop (overflow) and a read or dequeue it
could not serve (underrun). Its `buffer_watchdog` latches each kind in a
sticky flag. Each flag drives one red LED, so the experimenter can see
afterwards that the run was affected, even by a single lost event:

| LED | Meaning |
|---|---|
| `ledr[0]` | event FIFO overflow: spikes were lost because the host read too slowly |
| `ledr[1]` | event FIFO underrun: the host read TSTAMP with no event waiting |
| `ledr[2]` | stimulus FIFO overflow: the host wrote a sample with no room for it |
| `ledr[3]` | stimulus FIFO underrun: a sync arrived before the next sample |

The flags and the 16-bit saturating error counters are cleared only by
`IRQACK[1]` or by reset. When the event FIFO overflows, the newest words are
dropped and the oldest are kept.

## Parameters

| Parameter (top) | Default | Origin |
|---|---|---|
| `N_CH` | 32 | one input per bit of the 32-bit flag field |
| `CLK_PER_US` | 50 | 50 MHz board clock (own choice) |
| `EV_DEPTH` | 1024 | own choice; the FIFO holds `EV_DEPTH+1` words, 8 M9K blocks |
| `STIM_DEPTH` | 2 | own choice |

The widths of the timestamp, the flags, the event word and the stimulus are
fixed in `neuro_pkg`. `N_CH` may be anything from 1 to 32. For example, 4
inputs give 4 used flag bits.

## What follows the source design and what does not

These parts follow the published block diagram and text:

* the 32-bit timestamp counter stepped every 1 µs;
* the 32-bit channel flags joined with the timestamp into a 64-bit word;
* the block-RAM FIFO towards the PCIe bus;
* the 8-bit register FIFO whose head goes to the digital outputs on a
  synchronous dequeue signal;
* the stimulus-sync signal that drives that dequeue;
* an interrupt for arriving timestamps and for stimulus synchronization;
* host commands to start and stop acquisition and to supply stimuli;
* a pair of watchdogs lighting red LEDs on buffer overflow or underrun.

These are choices of this implementation, because the source description
leaves them open:

* the clock rate;
* the number of synchronizer stages;
* rising-edge detection;
* collecting flags per microsecond and writing at the end of it;
* where the flags sit in the 64-bit word;
* both FIFO depths and their drop-on-full policy;
* the register map, the 32-bit bus width and the level interrupt;
* the start/stop behaviour;
* the watchdog's sticky flags, counters and LED assignment;
* the asynchronous active-low reset.

The source design was written in Bluespec SystemVerilog. This is an
independent SystemVerilog description of the same structure. It is not a
translation.

These parts are not included:

* the PCIe hard IP and the PCIe-to-Avalon bridge, which are vendor IP; the
  top's `avs_*` and `irq` ports are where the bridge connects;
* the analog front-end that turns electrode signals into pulses;
* the host software, meaning the real-time driver, the pattern-matching
  stimulus controller, data archiving and the web clients.

Some things are not verified at all:

* timing closure and resource use on the real FPGA;
* behaviour at the counter wrap, because 2^32 µs cannot be simulated.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/neuro_pkg.sv \
          tb/tb_neuro_ts_top.sv --top-module tb_neuro_ts_top -o sim
obj_dir/sim
```

| Testbench | What it shows |
|---|---|
| `tb_digital_in_sync` | cycle-exact synchronizer outputs against a sampled history of the pins; pulse counts |
| `tb_clock_counter` | counting, clear priority |
| `tb_sync_logic_control` | one step per 5 clocks (scaled-down rate), flags and write strobe of each microsecond, stimulus dequeue, stop/restart |
| `tb_event_packer` | word layout, no word without flags |
| `tb_bram_fifo` | order, two-cycle fall-through latency, capacity `DEPTH+1`, overflow/underrun pulses, random traffic (depth 8) |
| `tb_stim_fifo` | output sequence, one-cycle output delay, overflow and underrun |
| `tb_buffer_watchdog` | sticky flags, saturating counter, clear |
| `tb_host_regs` | every register, strobes, request/acknowledge, interrupt |
| `tb_neuro_ts_top` | whole design at its default size. It covers multi-channel and repeated-pulse merging, closed-loop refills, stop/restart, an event FIFO overflow with a check that the oldest 1025 words survived, both stimulus errors, the event underrun and the watchdog clear. It counts each of these mechanisms and fails if any of them never happened. |
| `tb_h1_closed_loop` | 300 ms at the default size, shaped like a single-neuron experiment. A spike train with bursts is recorded, the stimulus is an oscillating point of light on the 8 outputs, and the host model flashes all LEDs when it sees a burst. |

The two full-design testbenches run the real 50-clock microsecond and each
finish within seconds; `tb_sync_logic_control` shortens the microsecond to 5
clocks.
