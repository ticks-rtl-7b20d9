# TiCkS time-stamping firmware in SystemVerilog

A Cherenkov telescope camera sends its trigger decisions to a White Rabbit
(WR) timing node. The node has to give every trigger an absolute time,
in TAI seconds, with nanosecond precision. It also has to keep the camera's
event number and a 16-bit word of event data that the camera sends over
SPI just after the trigger. Finally it has to send all of this over the
same 1 Gbit/s fibre that carries the timing. The WR core alone gives a
125 MHz clock (8 ns ticks), a PPS and the TAI second. The logic described
here adds three things on top:

* the nanosecond inside the 8 ns tick, read from a 1 GHz shift register;
* packing of the events into compact UDP bunches of up to 20;
* a small command set, used to aim the bunches, to schedule a trigger back
  to the camera at a given TAI time, and to zero the camera's counters and
  the node's counters on the same PPS.

It also sends the camera a 10 MHz clock whose edges line up with the PPS.

The RTL covers everything between the WR core, the PLLs, the UDP/IP stack
and the I/O buffers. Those four are not here: the top module brings out
their signals as ports.

## Clock domains

| Clock     | Frequency | Used for                                              |
|-----------|-----------|-------------------------------------------------------|
| `clk_fast`| 1 GHz     | sampling the trigger lines (1 ns bins)                |
| `clk_wr`  | 125 MHz   | WR clock: fine/coarse TDC, event counters, ext. trigger|
| `clk_sys` | 62.5 MHz  | SPI, event assembly, bunches, packet stream, commands |
| `clk200`  | 200 MHz   | 10 MHz camera clock and the re-timed PPS              |

All four clocks are derived from the WR clock. They are therefore related,
but the design treats `clk_wr`→`clk_sys` as an asynchronous crossing. There is
one active-low asynchronous reset, `rst_n`.

## Time-stamping a trigger (`ts_channel`)

There are two identical channels: the read-out line (channel 0) and the
busy line (channel 1). Each channel is a chain of five blocks.

**`iserdes_sr`**: the trigger is shifted into an 8-bit register on the
1 GHz clock. On each 125 MHz edge the register is copied, with the oldest
sample in the MSB. A word therefore covers exactly one WR tick.

**`fine_tdc`**: scans the word from MSB to LSB for the first 0→1 step. Its
position is the number of nanoseconds after the tick (0–7). The newest
sample of the previous word is kept as the "bit before the MSB", so a
rising edge that falls exactly on a word boundary is still found. The
result is registered. `hit` is high for one WR cycle, together with
`fine`.

**`coarse_tdc`** (one per channel, both zeroed by the same PPS): a 27-bit counter of
WR ticks, set to zero by the WR PPS. 27 bits hold 125 × 10⁶ ticks. The
full time is

    t = TAI second + coarse × 8 ns + fine × 1 ns

**`event_counter`**: counts a trigger pulse only if it stays high for more
than 20 ns. The line goes through a two-flop synchronizer on the WR clock,
and a pulse is counted once it has been seen high on `MIN_HIGH` = 2
consecutive samples after synchronization. A pulse of 16 ns or more is
always counted, which covers the camera's >20 ns pulses. One shorter than
8 ns never is. The counter
counts every pulse, even when no time-stamp can be taken, so a gap in the
event numbers shows a lost time-stamp. While the counters are being
synchronised (see below) it is held at zero.

**`ts_capture`**: on `hit` it latches TAI, coarse and fine. It then waits up
to `CNT_WAIT` = 6 WR cycles for this trigger's increment of the event
counter. The synchronizer and filter make that increment arrive a few
cycles after the fine TDC has fired. The event number stored in the record
is therefore the one of this trigger. The PPS counter is stored as well.

**`ts_cdc`**: carries the 134-bit time-stamp (TAI, coarse, fine and both counters) to the 62.5 MHz domain with a
two-phase toggle handshake. The data register is loaded only while the
crossing is idle. The request toggle goes through two flops to `clk_sys`.
The acknowledge toggle comes back the same way. The source stays busy
until the system side has said `done`. A trigger that arrives while the
channel is busy is counted but not time-stamped, and is reported on
`dropped`.

### Dead time

After a trigger the channel cannot take another time-stamp until the
system side releases it. The time adds up from four parts:

1. about 3 WR cycles for the fine TDC, the capture register and the event
   counter wait;
2. about 3–4 system cycles to cross;
3. 25 system cycles (400 ns) of waiting for the SPI word;
4. the acknowledge crossing back.

This comes to 0.50–0.55 µs, depending on the clock phases. `tb_ticks_top`
measures it on every free-channel trigger (505–548 ns). It caps one
line at roughly 1.8 MHz of time-stamped triggers.

## Waiting for the SPI word (`spi_rx`, `event_assembler`)

The camera sends a 16-bit word per trigger: SPI mode 0, MSB first,
chip-select low during the word. At 50 MHz this takes about 320 ns.

`spi_rx` shifts on the SPI clock itself. Its bit counter is cleared
asynchronously whenever chip-select is high. On the 16th bit it stores the
word and flips a toggle. The toggle is synchronized to `clk_sys`, and the
word is read there only after the toggle has crossed, when the word
register has long stopped changing. One `spi_rx` serves both channels. Each channel's assembler takes
the first word that arrives after its own time-stamp.

`event_assembler` (one per channel) runs on `clk_sys`:

* When a time-stamp arrives it starts a 25-cycle (400 ns) timer.
* If the SPI word comes first, the event is written at once with
  `spi_valid` = 1.
* If the timer runs out first, the event is written with `spi_valid` = 0
  and the SPI field zero.
* Either way, the channel is released to take the next time-stamp only when
  the 400 ns have passed.
* If the bunch builder cannot take the event, the assembler holds it.

## Records and bunches (`bunch_builder`, `sync_fifo`)

Every event becomes a 96-bit record. It holds only the low bits of the
slowly changing fields. The bunch's tailer holds the full values, so a
receiver can rebuild every field.

    record [95]      channel (0 read-out, 1 busy)
           [94]      SPI word valid (0 = SPI time-out)
           [93:78]   SPI word
           [77:54]   event counter, 24 LSBs
           [53:46]   PPS counter, 8 LSBs
           [45:30]   TAI seconds, 16 LSBs
           [29:3]    coarse tick (full 27 bits)
           [2:0]     fine ns

    tailer [159:120] TAI seconds (40)      [119:93] coarse (27)
           [92:90]   fine                  [89]     channel
           [88:83]   events in the bunch   [82:51]  event counter (32)
           [50:19]   PPS counter (32)      [18:0]   zero

The tailer carries the full time and counters of the **last** event in
the bunch. To rebuild an earlier record's TAI second, take the tailer's
TAI and replace its 16 low bits with the record's, stepping back 2¹⁶ s if
the record's bits are larger. Rebuild the counters the same way.

Records go into one of two first-word-fall-through FIFOs, each 96 bits ×
40 entries (`sync_fifo`). A bunch closes when either of these happens:

* the filling FIFO holds 20 events;
* 200 ms (12,500,000 system cycles) have passed since the last closure and
  the FIFO holds at least one event.

At closure the tailer is frozen and the FIFOs swap roles. The next events
fill the other FIFO while the closed one is sent. This ping-pong hides the
six cycles that each record costs on the 16-bit stream.

Further rules:

* If 20 events are reached while the other FIFO is still being sent, the
  current FIFO keeps filling (up to 40) and closes as soon as it can swap.
* An event that finds the filling FIFO full is dropped, and `ev_lost`
  pulses.
* When both channels offer an event in the same cycle, the read-out
  channel goes first.
* No event is written in the cycle in which a bunch closes, so the tailer
  and the event count always agree with the FIFO.

## The packet stream (`packet_tx`)

A closed bunch is sent to the UDP stack as 16-bit words with
`tx_valid`/`tx_ready`, and `tx_last` on the final word. Each record is sent
as six words, most significant first. The ten tailer words follow. The
UDP payload is 12·n + 20 bytes: 260 bytes for a full bunch, or 302 bytes
with Ethernet/IP/UDP headers. `tx_len` gives the payload length while the
packet is sent. With `tx_ready` held high, a bunch of n events takes
6·n + 11 cycles: 131 cycles, or 2.1 µs, for 20 events. Filling that bunch
takes 50 µs even at 400 kHz.

## Commands (`cmd_decoder`)

Command datagrams arrive from the UDP stack as 16-bit words. The first
word is the opcode. Arguments follow, most significant word first.

| Opcode | Command        | Argument words | Effect |
|--------|----------------|----------------|--------|
| 1 | SET_DEST_MAC | 3 | MAC address the bunches are sent to (default broadcast) |
| 2 | SET_EXT_TRIG | 5 | 3 words TAI seconds (40 bits, right-aligned), 2 words coarse tick (27 bits); arms the external trigger |
| 3 | RESET        | 0 | hold event and PPS counters at zero |
| 4 | GET_READY    | 0 | release the counters, with an external trigger, at the next PPS |

* A datagram with an unknown opcode or the wrong number of words is ignored
  and flags `bad_cmd`.
* The destination IP is the board's own IP with its low 10 bits replaced by
  `DEST_IP_LSB` (0x0FE).
* The destination port is fixed at `DEST_PORT` (50000).
* Command pulses reach the WR domain through toggle synchronizers
  (`pulse_sync`).

## Counter synchronisation (`sync_ctrl`) and external trigger (`ext_trigger`)

`sync_ctrl` (WR domain) has three states:

* **RUNNING**: event counters count, and the PPS counter counts PPS pulses.
* **RESET**: counters held at zero. It is entered on the RESET command.
* **GET_READY**: counters still at zero. The next PPS sends one external
  trigger to the camera and moves to RUNNING.

The camera, placed in its own get-ready state, restarts on that trigger,
so both sides start counting from zero together.

`ext_trigger` compares the armed (TAI, coarse) target with the running
time. It fires one WR cycle after the match, as a registered 4-cycle
(32 ns) pulse, and then disarms. The time is therefore always on the 8 ns
grid. The GET_READY trigger uses the same output.

## 10 MHz clock and PPS for the camera (`clk10_gen`)

A counter on the 200 MHz clock divides by 20, for 50 % duty. It starts on
the first PPS seen on that clock. The PPS sent to the camera is re-timed
by the same 200 MHz register stage, so the PPS and a rising 10 MHz edge
leave the chip on the same clock edge. After the start, the counter is not
reset by later PPS pulses. It stays in phase with them because 10 MHz
divides the second exactly.

## Module list

| File | Role |
|------|------|
| `ticks_pkg.sv` | widths, `ts_t`/`event_t` structs, opcodes, record/tailer packing |
| `iserdes_sr.sv`, `fine_tdc.sv`, `coarse_tdc.sv` | 1 ns / 8 ns time measurement |
| `event_counter.sv`, `ts_capture.sv`, `ts_cdc.sv` | counting, capture, clock crossing |
| `ts_channel.sv` | one complete WR-domain channel |
| `spi_rx.sv`, `event_assembler.sv` | SPI word and 400 ns wait |
| `sync_fifo.sv`, `bunch_builder.sv`, `packet_tx.sv` | bunches and their stream |
| `cmd_decoder.sv`, `pulse_sync.sv`, `sync_ctrl.sv`, `ext_trigger.sv` | control |
| `clk10_gen.sv` | 10 MHz and PPS outputs |
| `ticks_top.sv` | top level |

All parameters default to the values the firmware uses:

* 8-bit SerDes;
* 400 ns SPI wait;
* 20-event bunches;
* 200 ms bunch time-out;
* 40-deep FIFOs;
* divide-by-20 for the camera clock.

## Where this RTL departs from, or adds to, the original firmware

* The 1 GHz sampling is written as a plain shift register. The original
  uses the FPGA's SerDes primitive and its high-speed clock buffer. A
  real build would put the vendor primitive back in `iserdes_sr`.
* The original uses the FIFO, SPI core and UDP stack of other projects. Here
  the FIFO and SPI receiver are written from scratch, and the UDP stack is
  outside behind a simple stream interface.
* The field layout of records and tailer, the widths of the counters
  (32-bit event and PPS counters, 40-bit TAI) and the command encoding are
  this design's own. Only the sizes (12-byte records, 20-byte tailer,
  20 events) and the meaning of the commands are taken over.
* The 400 ns SPI wait starts when the time-stamp reaches the system clock,
  not at the trigger. The dead time is therefore 0.50–0.55 µs rather than
  0.4 µs. Triggers 380–525 ns after the previous one on the same line are
  counted but not time-stamped. At 19 kHz random triggers this loses about
  0.27 % of them, where the original reports about 10⁻⁵. To shorten it,
  start the timer from the trigger time, or lower `SPI_TIMEOUT` by the
  crossing latency.
* Overflow handling when both FIFOs are busy, channel priority, and the
  choice of the last event for the tailer are not specified by the
  original and are chosen here.
* The 200 ms bunch timer restarts when a bunch closes. The original counts
  from when the FIFO was last emptied. The two differ by the read-out time
  of a bunch, at most a few microseconds.
* Not built:
  * the rate throttle, which is planned but not specified;
  * DHCP and IP configuration, which belong to the UDP/IP stack;
  * SNMP monitoring, which is part of the WR core.

## Simulating

Every module except `pulse_sync` (covered through `tb_ticks_top`) has a
self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=N failures=M`. For example, with Verilator 5:

    verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
        rtl/ticks_pkg.sv tb/tb_ticks_top.sv --top-module tb_ticks_top
    ./obj_dir/Vtb_ticks_top

Swap in any other testbench name the same way. Verilator has only two
states, so the testbenches drop reset at time 1 and start the SPI
chip-select low. This gives every asynchronous clear its edge.

* `tb_ticks_top` runs the whole design with a bunch time-out of 5000 cycles
  and a shortened second (200 µs). For every record it checks the channel,
  SPI word and flag, and event number, and checks that the time-stamp sits
  at the same offset from the injected trigger, to the nanosecond, for all
  events of a channel. Triggers cover the read-out and busy lines, every
  ns phase, and both SPI words and SPI time-outs. It checks the tailer
  against the last record and measures the dead time. It also checks
  the closure of full and timed-out bunches, FIFO overflow and lost events,
  dead-time drops, every command (including bad ones), the reset /
  get-ready sequence and the external trigger time. It counts how often each
  of these happened. It takes about a second.
* `tb_ticks_full` runs the top with every parameter at its default. It sends
  22 triggers, then waits the full 200 ms for the time-out packet. It takes
  about two minutes.
