# FPGA logic for a PSEC4 waveform-digitizer data acquisition system

The PSEC4 is a 6-channel waveform-sampling ASIC. Each channel writes its
input into a ring of 256 analog storage cells at 5 to 15 GSa/s. At
10.24 GSa/s the ring wraps every 25 ns. A trigger therefore has to stop the
chip within those 25 ns, or the waveform is overwritten. Only after that
can the stored samples be digitized and read out slowly.

A global trigger formed far from the detector almost always arrives later
than 25 ns. The system solves this with a local decision on each front-end
board: the PSEC4 discriminators stop the chips at once. The event is then
kept or dropped depending on whether the global trigger confirms it within a
programmable window. The events that are kept are read out through a
hierarchy of cards, which scales to 1920 channels:

```
 crate master (acm_master)                     1 per crate
   └─ 8 central cards (ACC, acc_fpga)          slaves of the master
        └─ 8 ACDC boards each (acdc_fpga)      one CAT5 link per board
             └─ 5 PSEC4 chips x 6 channels     30 channels per board
```

This repository has synthesizable SystemVerilog for the digital part of
that system: the control FPGA of the front-end (ACDC) board, the central
card (ACC), and the crate master. The PSEC4 chips, clock cleaners, LVDS
drivers and host interfaces (USB, Ethernet, SFP, VME) are outside the
RTL. Their signals appear as ports.

The system is the one described in "A Modular Data Acquisition System
using the 10 GSa/s PSEC4 Waveform Recording Chip" (Bogdan, Oberla, Frisch,
Wetstein). That description is at board level. It gives the counts, the
signal set of the board link, the trigger modes, and which settings are
programmable. It does not give the firmware. Everything below the block
level is this design's own: the serial frame, the packet format, the
register map, the flow control, the FIFO sizes and the merging policy. The
section "What comes from the source system" keeps the two apart.

## The board link

An ACDC board and its central card are joined by eight LVDS lines:

| direction | line | use in this design |
|---|---|---|
| card → board | system clock | one clock for all logic (the board cleans its jitter and derives the PSEC4 sampling clock) |
| card → board | serial config data | configuration words (`serial_tx` → `serial_rx`) |
| card → board | system trigger | global trigger pulse |
| card → board | system interface flag | `link_en`: flow control, the board starts no new data word while it is low |
| board → card | serial data ×2 | event packets; even words on line 0, odd words on line 1 |
| board → card | board trigger out | the board's local trigger (OR of the masked discriminators) |
| board → card | system interface flag | `busy`: the board is holding or reading an event |

The source system names both flags but does not say what they carry. The
uses in the table are this design's choice.

**Serial frame.** A line idles at 0. A frame is one start bit (1), then 16
data bits MSB first, then one stop bit (0). That is 18 clocks per word, and
a new frame may start right after the stop bit. Both ends run on the
distributed system clock. The receiver therefore samples once per clock and
does no clock recovery. In hardware the serializer would run on a bit clock
of up to 1.2 Gb/s per line. The RTL treats "one bit per clock" as its unit
of time.

**Order over two lines.** The two data lines carry words in turn. Each
word starts at least one clock after the one before it, and all frames have
the same length. So words finish at the receiver in the order they were
sent, and never two in the same clock. `acc_link_rx` therefore needs no
reorder buffer. It asserts that no collision ever happens, and it counts a
word that arrives on the unexpected line as an order error.

**Flow control.** `acc_link_rx` drops `link_en` when fewer than 6 FIFO
entries are free. That leaves room for the words already in flight when the
board sees the flag. With the default FIFO of 8192 words per board, a whole
event packet (7682 words) fits. The flag then matters only when the host
stops reading for a long time.

## Triggering on the ACDC board (`acdc_trigger`)

The 30 discriminator outputs pass a two-flip-flop synchronizer. They are
then ANDed with the 30-bit channel mask and ORed into the *local trigger*.
The local trigger is also driven out as `board_trig_out`. The *external
trigger* is the system trigger from the central card ORed with the
on-board trigger input. Both are acted on at their rising edges.

| mode | starts an event |
|---|---|
| `TRIG_EXTERNAL` | external edge |
| `TRIG_SELF` | local edge |
| `TRIG_COINC` | local edge, confirmed by an external edge within `window` clocks |
| `TRIG_OFF` | nothing |

A software trigger (configuration command) starts an event in every mode
except `TRIG_OFF`.

**Stopping the chips in time.** The synchronizer and the decision
register take three clocks, which is 75 ns at 40 MHz. That is three times
the 25 ns the ring holds a pulse. So in the self and coincidence modes, a
combinational fast path drives the five PSEC4 trigger lines:

- The lines rise as soon as an unmasked discriminator bit is high, with no
  clock in between. Only gate delay is added.
- The raw bit and its two synchronizer copies keep the lines high until the
  FSM has taken the event, three edges later. From then on the FSM holds
  them.
- The fast path works only while the FSM is armed and the registered local
  trigger is low. A channel stuck high therefore cannot hold the chips
  forever; it has to be masked like any noisy channel.
- A discriminator pulse shorter than a clock that no edge samples stops the
  chips only for its own length and starts no event.

The coincidence mode is the one that needs care. The local edge has
already stopped the chips through the fast path. The FSM then waits in
`WAIT_SYS`:

- If an external edge arrives in one of the next `window` clocks (at least
  1), the event is kept. `event_start` pulses and the readout begins.
- An external edge in the same clock as the local edge also counts.
- If no external edge arrives, the trigger lines drop after exactly
  `window` clocks. The chips then sample again, and `n_dropped` counts the
  miss.
- An external edge with no local edge before it is ignored. That order,
  local first and global second, is the situation the mode exists for.

In every mode, the PSEC4 trigger lines stay high from the deciding edge
until the readout reports `readout_done`.

Latencies, counted in clock edges after the input changes:

| path | edges |
|---|---|
| discriminator bit → `event_start` (self mode) | 3 |
| discriminator bit → PSEC4 trigger lines (self and coincidence modes) | 0 (combinational) |
| system trigger → `event_start` (external mode) | 1 |
| central card: host trigger → system trigger line | 1 |
| central card: external input or board trigger → system trigger line | 3 |
| crate master trigger → slave's system trigger line | 1 more |

## Configuration (`acdc_config_regs`)

A configuration word is `{addr[3:0], value[11:0]}`. The central card sends
it to any set of boards at once (`acc_config_tx`). The word takes effect one
clock after the board has received it, which is 20 clocks after the command
is accepted.

| addr | register | reset value |
|---|---|---|
| 0 | trigger mode (`value[1:0]`, encoding in `daq_pkg::trig_mode_e`) | self |
| 1 / 2 / 3 | channel mask bits 11:0 / 23:12 / 29:24 | all channels enabled |
| 4 | coincidence window, in clocks | 40 (1 µs at 40 MHz) |
| 5 … 9 | threshold setting of PSEC4 chip 0 … 4 (12 bits, to the threshold DAC) | 0x800 |
| 10 | command: `value[0]` = software trigger | — |

Other addresses are ignored and counted.

## Event readout and packet format (`acdc_readout`)

When an event is kept, the readout walks the sample array. The loop order
is channel 0…5, then cell 0…255, then chip 0…4. For each channel and cell
it drives the address to all five chips at once. It takes their five ADC
values two clocks later and emits one word per chip. The packet is:

| word | bits 15:12 | bits 11:0 |
|---|---|---|
| header | `0xE` | event number (per board) |
| sample, 7680 of them | chip number (0…4) | ADC value |
| trailer | `0xF` | event number |

The tags are unambiguous, so the trailer alone marks a packet's end
further up the chain. Two 18-clock frames run in parallel, which gives 9
clocks per word. The three-clock address fetch at each cell brings the
average to about 9.4 clocks per word: some 72,000 clocks for a full
7682-word packet. After the trailer has left, `readout_done` re-arms the
trigger.

The PSEC4 readout interface used here is a simplification: a broadcast
channel/cell address and one 12-bit value per chip, valid one clock later.
Conversion control of the chip's on-chip ADCs is not part of this design.
It assumes the values are ready.

## The central card (`acc_fpga`)

- **Per board:** `acc_link_rx` (two deserializers into one FIFO of `DEPTH`
  words, plus flow control and error counters).
- **`acc_event_builder`:** merges the boards' FIFOs into the host stream.
  It serves one board at a time and a whole packet at a time, round-robin
  starting after the board served last. Each word is tagged with its board
  number, and the trailer is flagged `last`. Choosing a board costs one
  clock; after that it forwards one word per clock.
- **`acc_trigger`:** registers a global trigger from any enabled source:
  the external input, a host request, or the masked OR of the board
  triggers. It then drives a 2-clock system-trigger pulse to all boards.
  A level that stays high triggers only once.
- **`acc_config_tx`:** one serializer per board's config line. A host
  command (board mask + word) is accepted when all serializers are idle.
- **Slave mode** (`slave_mode = 1`): the system trigger to the boards is
  the master's trigger line, delayed by one register. The card's own
  trigger logic is ignored. `card_trig`, the OR of the card's masked board
  triggers, goes up to the master.
- **Master mode** (`slave_mode = 0`): `card_trig` carries the card's own
  system trigger instead. A second card can then be slaved to it directly,
  without a crate master:
  - the master's `card_trig` drives the slave's `master_trig`;
  - the slave's `card_trig` drives the master's external trigger input.

  `tb_otpc_two_card` uses this wiring.

Because packets are forwarded whole, a host that reads all boards after one
trigger gets them one after another. The first packet arrives at link
speed, while it is being received. The others follow at one word per clock
out of their FIFOs. With eight boards, one event takes about 127,000 clocks
from trigger to last word.

## The crate master (`acm_master`, `daq_crate`)

`acm_master` reuses `acc_trigger` for the crate-wide trigger. Its "board"
inputs are the slave cards' `card_trig` lines. It merges the slaves' host
streams with the same whole-packet round-robin policy, and it adds a 3-bit
card number (`daq_pkg::crate_word_t`).

`daq_crate` is the top level. It has one master and `N_ACC_P` slave
`daq_system`s (a central card plus its `N_ACDC_P` boards). Host
configuration commands carry a card mask and a board mask. The PSEC4-side
ports are arrays indexed `[card][board]`.

The source system says both that central cards can be daisy-chained to the
master and that the master receives data from up to eight slaves. This
design uses a star: one stream per slave. Each stream stands in for an
optical or CAT5 link whose protocol is not given.

## What comes from the source system, and what does not

Taken from the source system:

- the hierarchy and its counts: 5 PSEC4 chips × 6 channels = 30 channels
  per ACDC; 8 ACDCs per central card; 8 central cards under one master,
  1920 channels;
- 256 cells per channel;
- the eight link signals and their directions;
- external, self and coincidence triggering;
- a programmable channel mask and coincidence window, set over the serial
  link;
- a separate threshold per PSEC4;
- per-chip trigger lines, and a board trigger sent to the central card;
- readout when a global trigger is registered at the central card;
- master/slave operation.

This design's own choices:

- single-clock operation;
- the serial frame format;
- the meanings of both interface flags (flow control and busy);
- the lane split;
- the register map, its widths and its reset values;
- the 12-bit sample width;
- the packet format;
- the OR of masked channels as the local trigger;
- the combinational fast path to the PSEC4 trigger lines;
- the single trigger output of a card: its board OR as a slave, its system
  trigger as a master;
- the local-then-global order in coincidence mode;
- holding the chips until readout ends;
- the on-board trigger input ORed into the external trigger;
- the FIFO depth of 8192 words;
- whole-packet round-robin merging at both levels;
- the trigger sources of the central card and master and their pulse
  length;
- the star topology from the master to the slaves;
- the PSEC4 address/data readout interface.

Not in the RTL: the PSEC4 chips (a behavioural readout model,
`tb/psec4_model.sv`, serves the testbenches), the jitter-cleaning PLL, the
LVDS buffers, the USB, Ethernet, SFP and VME interfaces, and the threshold
DACs.

## Files

`rtl/`, one module or package per file:

| file | contents |
|---|---|
| `daq_pkg.sv` | counts, trigger-mode enum, config addresses, packet tags, host word structs |
| `serial_tx.sv`, `serial_rx.sv` | link serializer and deserializer |
| `acdc_config_regs.sv`, `acdc_trigger.sv`, `acdc_readout.sv` | ACDC board blocks |
| `acdc_fpga.sv` | ACDC control FPGA |
| `sync_fifo.sv`, `acc_link_rx.sv`, `acc_event_builder.sv`, `acc_trigger.sv`, `acc_config_tx.sv` | central-card blocks |
| `acc_fpga.sv` | central-card FPGA |
| `daq_system.sv` | one central card and its boards |
| `acm_master.sv` | crate master |
| `daq_crate.sv` | top: master plus slave cards |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:

- `tb_daq_system_full.sv` and `tb_daq_crate_full.sv`, which run at the
  default sizes;
- `tb_otpc_two_card.sv`, a two-card master/slave system at full cell and
  FIFO sizes;
- `tb_sniffer.sv`, an independent frame decoder;
- `psec4_model.sv`, whose samples are a known function of board, chip,
  channel and cell, so that every word can be predicted:
  `(board·1009 + chip·331 + channel·97 + cell·13 + 5) mod 4096`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/daq_pkg.sv tb/tb_daq_crate.sv --top-module tb_daq_crate
./obj_dir/Vtb_daq_crate
```

To run another testbench, replace `tb_daq_crate` with its name. Every
testbench ends with a line `TB_RESULT checks=N failures=M`, and a watchdog
stops it if it hangs.

What the testbenches cover:

- `tb_daq_crate` (3 cards × 2 boards, 4 cells) and `tb_daq_system`
  (8 boards, 4 cells) drive every mechanism at least once and count them:
  - configuration;
  - master external and host triggers;
  - a slave ignoring its own input;
  - self trigger with a masked channel;
  - a global trigger built from a board trigger and confirmed in
    coincidence mode;
  - a coincidence timeout;
  - software and on-board triggers;
  - trigger off;
  - flow control stalling the boards.
- `tb_otpc_two_card` is the 180-channel test-beam set-up at full size.
  It has two cards, master and slave, with three boards each, all in
  coincidence mode:
  - hits on slave and master boards are confirmed by the global trigger
    and read out;
  - a hit on a board outside the trigger mask is dropped after the window;
  - two cards are read in parallel.

  A slave board's hit returns as a global trigger 6 clocks later, against a
  40-clock window.
- `tb_daq_crate_full` runs the whole 1920-channel system at its defaults.
  After one trigger, all 64 packets (491,648 words) are checked word by
  word. The last one arrives 557,018 clocks after the trigger, and the run
  takes a few seconds.

Sizes are parameters: `N_ACC_P`, `N_ACDC_P`, `N_CELLS_P` and `FIFO_DEPTH`
on `daq_crate`, with the fixed counts in `daq_pkg`. Keep `FIFO_DEPTH` at or
above one packet (2 + 30·`N_CELLS_P` words) if all boards should be able to
send an event at full speed at the same time. A smaller FIFO still works,
because flow control then throttles the boards.
