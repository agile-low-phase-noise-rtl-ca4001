# A ramp player for a DDS chip: FPGA logic of an agile RF sine-wave generator

Some cold-atom experiments trap atoms with a radio-frequency field, and the
frequency of that field sets where the atoms sit. Loading such a trap means
sweeping the frequency, typically from 1 MHz to a few MHz over 0.1 s to 10 s
along a hand-shaped curve, then holding the final frequency for seconds. Three
things go wrong with ordinary sources:

* a phase jump of the RF flips the field the atomic spins follow, and atoms are lost;
* a frequency step that is too coarse does the same thing on a smaller scale;
* noise on the frequency shakes the trap and heats the cloud.

A direct digital synthesis (DDS) chip solves the first and third problems. It
builds the sine wave from a phase accumulator that is never reset, so a change
of frequency continues from the present phase. With a clean reference clock,
the output is as clean as that clock. What remains is to feed the chip a long
list of frequencies, each at the right moment. The device this RTL describes
is the one published by Morizot et al., "Agile low phase noise radio-frequency
sine wave generator applied to experiments on ultracold atoms". An FPGA stores
up to **262,144 frequency words** in a 1 MB SRAM and plays them into an
**AD9851** DDS, at most one word per microsecond. Each of **10 memory zones**
has its own time per word, from 1 µs to more than an hour. A TTL edge starts
the ramp. After the last word the device holds the last frequency until a
second TTL edge ends the sequence.

This repository holds synthesizable SystemVerilog for the FPGA side of that
device, plus behavioural models of the SRAM and the DDS chip for simulation.
Everything the FPGA has to do is included. The published description leaves
out the microcontroller program and the serial protocol, so this design
supplies its own, documented below.

## How a ramp is described

A ramp is an ordered list of 32-bit **tuning words** `w`. The DDS output
frequency is `f = f_clk · w / 2^32`. In the published set-up, `f_clk` is 60 MHz:
a 10 MHz oven-controlled quartz multiplied by 6 inside the AD9851. The
resolution is 60 MHz / 2^32 ≈ 0.014 Hz. The host converts frequencies to
words; the FPGA never does arithmetic on them. Some frequencies need no
truncation at all. Words with their low 18 bits at zero make the chip's 14-bit
sine lookup exact, and at 60 MHz those are the multiples of 3,662.109375 Hz.
Choosing one (3.75 MHz gives w = 2^28) is a matter for the host.

The word list fills memory from address 0. It is cut into 10 consecutive
**zones**, and each zone has a descriptor (`group_t` in `rf_synth_pkg`):

| field    | bits | meaning |
|----------|------|---------|
| `length` | 32   | number of words in the zone; 0 means the zone is unused |
| `period` | 32   | time each word of the zone stays on the output, in 1 µs ticks; 0 counts as 1 |

Zones let a fine ramp and a long plateau share a memory. For example, zone 0
can hold 150,000 words at 1 µs (a 150 ms ramp in 13 Hz steps), and zone 1 a
single word at 10,000,000 ticks (10 s). The same word list can be stretched or
compressed in time by changing only the descriptors.

## The byte stream from the host

The host sends one load as a single stream over the serial port: 8N1 at
115,200 baud, 434 clocks per bit at 50 MHz. Every 4-byte value goes most
significant byte first.

| bytes              | content |
|--------------------|---------|
| 0–3, 4–7           | zone 0 `length`, zone 0 `period` |
| 8–15 … 72–79       | zones 1 … 9, same layout |
| 80 …               | the words of zone 0, then zone 1, …, 4 bytes each |

`mem_loader` writes each descriptor to the group table as soon as its 8 bytes
are in. It adds up the lengths, clamping each one so that the total never
exceeds the memory. It then expects exactly that many words and writes them to
consecutive SRAM addresses. `loaded` rises after the last write, and a new
load can follow at once. Every received byte is echoed back on the transmit
line, so the host can check the transfer. The stream has no framing byte and
no timeout: a host that stops in the middle must reset the FPGA before it
sends again. A full memory takes 80 + 4 × 262,144 bytes, about 91 s at
115,200 baud.

## Playing a ramp

`ramp_sequencer` has three visible states (`seq_state_t`): **IDLE**, **RUN**
and **HOLD**. The timeline, in 50 MHz clocks:

```
TTL rising edge
  +2          synchronised edge pulse (ttl_start)
  +3          sequencer realigns the timebase (restart clock)
  +3+50       first tick; the load command for word 0 follows one clock later
              and the AD9851 FQ_UD 12 clocks after the command
  each next word: its command leaves exactly period(previous word) x 50 clocks
                  after the previous command
after the last word: HOLD, no more loads, the DDS keeps the last frequency
next TTL edge: tuning word 0 is loaded (output at DC), back to IDLE
```

While one word is on the output, the sequencer looks up the zone of the next
word and skips empty zones, one per clock. It then reads the word from SRAM,
so the word is ready before the current one's time is up. The lookup and read
take at most N_GROUPS + 12 clocks, counting a wait for a loader write in
progress. That must be less than one tick, which holds with 50 clocks per tick. An assertion (`a_ready_in_time`) fires if it ever
does not. Because every step of the load path has a fixed latency, the FQ_UD
pulses at the DDS are spaced exactly as the zone time steps say.

A TTL edge during RUN is ignored. So is a TTL edge before a complete load is
in memory or while a load is in progress. Loading new data while a ramp plays
is not blocked, but it changes the ramp under the sequencer's feet. The host
should not do it.

## Getting a word into the AD9851

The AD9851 takes a 40-bit word: a control byte W0 and the 32-bit tuning word.
W0 holds a 5-bit phase offset, power-down, a bit that must be 0, and the 6×
reference multiplier enable. `dds_if` uses the chip's parallel mode. It puts
each of the five bytes on D7..D0 for one clock, then raises W_CLK for one
clock, and after the fifth byte it pulses FQ_UD. The load takes 12 clocks
(240 ns), well inside the 1 µs tick. A serial 40-bit load would not fit in the
tick at this clock rate, which is why parallel mode is used. W0 is fixed at
`0x01`: phase 0, powered up, 6× on. After reset, `dds_if` pulses the chip's
RESET pin for 8 clocks. It never resets the chip again, so the phase
accumulator runs on through every frequency change and the output has no
phase jump.

## Memory

The 1 MB asynchronous SRAM is taken as 262,144 × 32 bits, for instance two
256K × 16 chips sharing address and control lines. `sram_ctrl` drives all
pins from flip-flops. It splits the data bus into out, out-enable and in, and
leaves the tristate pads to the board wrapper. A read holds CE, OE and the
address for 1 + RD_WAIT clocks, 40 ns by default, then samples the data. A
write drives address and data for one clock, pulses WE for one clock, then
holds for one clock. Reads from the sequencer take priority over writes from
the loader. Both ports use request/acknowledge: the request is held until a
one-clock acknowledge, and the controller rests one clock after each access.
Assertions check that the FPGA never drives the bus while OE is low, and that
WE is only pulsed while the FPGA drives the data bus.

## Block map

```
rf_synth_top
├── uart_rx ──► mem_loader ──► group_table ◄─────────── ramp_sequencer ──► dds_if ──► AD9851 pins
│                  │  └──► uart_tx (echo)                   ▲   ▲
│                  └── write port ─► sram_ctrl ◄─ read port ┘   │
├── ttl_start ─────────────────────────────────────────────────┤
└── timebase (50-clock tick) ──────────────────────────────────┘
```

| file | what it is |
|------|------------|
| `rtl/rf_synth_pkg.sv` | zone index width, `group_t`, `seq_state_t`, AD9851 W0 layout |
| `rtl/rf_synth_top.sv` | the FPGA design, plain-signal ports |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | 8N1 serial receiver and transmitter |
| `rtl/mem_loader.sv` | byte-stream parser, memory and table writer, echo |
| `rtl/group_table.sv` | 10 zone descriptors in registers |
| `rtl/sram_ctrl.sv` | asynchronous SRAM controller, two ports |
| `rtl/ttl_start.sv` | TTL synchroniser and rising-edge detector |
| `rtl/timebase.sv` | divide-by-50 tick, realigned on start |
| `rtl/ramp_sequencer.sv` | zone walk, prefetch, timing, hold and end |
| `rtl/dds_if.sv` | AD9851 parallel load and reset |
| `tb/sram_model.sv`, `tb/ad9851_model.sv` | behavioural models, simulation only |
| `tb/rf_synth_harness.sv` | board and host around the top, end-to-end checks |
| `tb/*_tb.sv` | self-checking testbenches, one per block and three for the top |

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `CLKS_PER_BIT` | 434 | top, UART | clocks per serial bit (50 MHz / 115,200) |
| `N_CYCLE` | 50 | top, timebase | clocks per 1 µs tick; the published value |
| `N_GROUPS` | 10 | top, loader, table, sequencer | number of zones; the published value |
| `ADDR_W` | 18 | top, SRAM, loader, sequencer | 2^18 = 262,144 words; the published size |
| `RD_WAIT` | 1 | sram_ctrl | extra read wait clocks |
| `PHASE`, `REFCLK_X6` | 0, 1 | dds_if | W0 phase offset and 6× multiplier enable |
| `RESET_CYCLES` | 8 | dds_if | length of the AD9851 RESET pulse |

All defaults are those of the published device where it gives a number. A
smaller `N_CYCLE` gives a faster sample rate. It must stay above
N_GROUPS + 12, about 22 clocks, or the prefetch misses. The published authors
mention the DDS chip's own limit of 3 MHz updates.

## What fits

At the defaults, the design holds every ramp the published experiment uses:

* a 2 MHz ramp needs more than 16,000 steps; 262,144 words are available;
* the 150 ms ramp of 1 → 3 MHz at 1 µs needs 150,000 words;
* a 500 ms ramp needs a step of at least 2 µs (250,000 words);
* a 10 s ramp needs a step of at least 39 µs;
* a plateau of up to 71 minutes fits one 32-bit time step, and the HOLD state
  lasts as long as needed;
* every tuning word from DC to 10 MHz fits in 32 bits.

## Simulating

All testbenches are self-checking. Each ends with a line
`TB_RESULT checks=N failures=M`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module rf_synth_top_tb \
    -y rtl -y tb -Irtl -Itb rtl/rf_synth_pkg.sv tb/rf_synth_top_tb.sv
./obj_dir/Vrf_synth_top_tb
```

Replace the top module and file for any other testbench, for example
`uart_rx_tb`, `sram_ctrl_tb`, `ramp_sequencer_tb` or `dds_if_tb`. The package
must come first on the command line. The simulator is two-state, and every
register read by the design is reset.

* `rf_synth_top_tb` runs end to end at reduced size: a 256-word memory and 8
  clocks per serial bit. It covers a TTL edge before any load (ignored), a
  ramp with empty zones and three different time steps, a TTL edge during the
  ramp (ignored), the hold, the end, and a second load whose lengths overflow
  memory and are clamped. Every DDS update is decoded from the pins and
  checked for its word and its spacing. Each of these mechanisms is counted,
  and one that never happens is a failure.
* `rf_synth_full_tb` runs with every parameter at its default. It does one
  short load at 115,200 baud and one complete start–ramp–hold–end sequence,
  in under a second.
* `rf_synth_fullmem_tb` uses the default sizes with the serial link sped up
  to 4 clocks per bit. It loads all 262,144 words, which form a linear
  1 MHz → 3 MHz ramp at a 60 MHz DDS clock, plays them at 1 µs per word with
  the last word held, and checks all 262,144 updates. It takes about a minute.

## Where this design departs from, or adds to, the published device

* **Loader.** The published device loads memory with a PicoBlaze soft
  microcontroller, whose program is not given. Here a hardwired state machine
  does that job. The stream layout (descriptors first, big-endian) and the
  byte echo are this design's choices.
* **Word encoding.** The published software takes integer frequencies in Hz.
  Here the 4-byte value in memory is taken to be the DDS tuning word, already
  converted by the host.
* **End of sequence.** The published device keeps the last frequency until a
  second TTL pulse "ends the sequence" without saying what the output then
  does. Here the end loads tuning word 0 (DC).
* **TTL edges during a ramp are ignored**, and a start needs a complete load.
  The published description says neither.
* **Baud rate, SRAM timing and organisation, AD9851 load mode and byte
  layout** are not given in the published text. The values here follow the
  Spartan-3 starter board and the AD9851 data sheet.
* **Not in the RTL**, because it is not logic or not designed by the authors:
  the AD9851 itself (accumulator, sine lookup, DAC, 6× multiplier), the SRAM
  chips, the 10 MHz reference oscillator, the 10 MHz low-pass filter, the
  PicoBlaze, and the PC software. The AD9851 and SRAM have behavioural models
  in `tb/`.
* The published text calls the memory both "1 Mb" and "1 M-byte". 262,144
  words of 4 bytes is 1 MB, which is what is built.
