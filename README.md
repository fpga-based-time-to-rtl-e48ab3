# A 32-channel FPGA TDC with trigger-driven zero suppression

This is synthesizable SystemVerilog for a time-to-digital converter (TDC) and
data-acquisition chain for a tagging detector at an e+e- collider. The target is
the KLOE-2 High Energy Tagger at DAΦNE. Each of 32 discriminated detector signals is
time-stamped with a 625 ps least significant bit (LSB) against the machine's
*Fiducial*, a signal that marks the first bunch of every revolution. The measures
are buffered continuously. Only the ones the experiment's triggers ask for reach
the main event buffer, which a VME crate controller reads.

The design follows a published description of such a system. That description
gives the principle of the TDC, the block diagram of the read-out, and the
Stack-buffer / Fiducial-Tag idea. It does not give the insides of most blocks.
Everything it leaves open was chosen here. These choices are marked in the source
headers and summarised in [What is given and what is chosen](#what-is-given-and-what-is-chosen).

## The problem

The machine stores 120 bunches, 2.7 ns apart, and only the first 100 are filled.
A particle has to be assigned to its bunch crossing, so the arrival time must be
resolved well below 2.7 ns, over a range of at least one revolution (324 ns).
The TDC measures all the time, but the experiment keeps an event only when its
first-level trigger **T1** fires and its second-level trigger **T2** confirms it.
T1 arrives some time after the collision it refers to. The data therefore have to
be kept long enough, and then cut down to the few revolutions the trigger refers
to.

## Data flow

```
 hit_in[c] ─► TDC ─► Stack buffer ─► Data Selector ─► RAM buffer ─► Channel to ─┐
 fiducial ──►  │        (ring,          (on T1)        (commit on    Master IF   │ 32 lanes
               │     newest-first)                        T2)         (T2)     │ 32-bit + rdy
               └──────────────── one chain per channel, x32 ──────────────────┘
                                                                               ▼
 T1, T2, KLOE signals ─► Trigger Manager ──T1/T2──►  chains, FSM Master ─► Data FIFO ─► VME slave ─► VME
                                                                  (256 kB)      ▲
                                     Status and Control Registers, scaler ──────┘
```

Everything runs on one 400 MHz clock `clk`. The only exception is the sampling
flip-flops, which also use `clk90`, `clk180` and `clk270`, copies of `clk` shifted
by a quarter period each. All resets are synchronous and active high.

## The 4xOversampling TDC (`oversampler`, `tdc`)

The input goes to four flip-flops clocked on the four clock phases, so it is looked
at every 625 ps. Each sample is then handed to an earlier clock phase, one stage at
a time, until it reaches `clk`. Every row is four flip-flops long, so the four
samples of one period come out together, three `clk` cycles later:

| output    | stage 1 | stage 2 | stage 3 | stage 4 |
|-----------|---------|---------|---------|---------|
| samples[0] | clk    | clk     | clk     | clk     |
| samples[1] | clk90  | clk     | clk     | clk     |
| samples[2] | clk180 | clk90   | clk     | clk     |
| samples[3] | clk270 | clk180  | clk90   | clk     |

Handing a sample over a quarter or half period, never across a full one, keeps
every transfer safe at 400 MHz. The first flip-flop of each row may still go
metastable.

The decision logic looks at five samples: the last sample of the previous period
and the four of this one. It finds the first 0→1 step. The index (0..3) of the
first high sample is the 2-bit **fine** time. A 12-bit **coarse** counter of `clk`
cycles restarts at the synchronised rising edge of the Fiducial. A measure is
`{coarse, fine}`, 14 bits in units of 625 ps, counted from the Fiducial. There is
also a pipeline offset, which is the same on every channel.
One bunch spacing is 4.3 LSB, and a revolution is about 518 LSB.

Two rules are this design's own:

- After a hit there is one `clk` cycle of dead time.
- The coarse counter saturates if Fiducials stop arriving.

## Stack buffer and Fiducial Tags (`stack_buffer`)

Every measure is pushed into the channel's Stack buffer. Every Fiducial pushes a
**Fiducial Tag**, a marker word with a running sequence number. The tags divide
the stream into revolutions. A reader that starts at the newest word and walks
backwards can therefore tell which revolution each measure belongs to, and can
stop after the ones it needs.

Here the stack is a ring of 1024 16-bit words (bit 15 = tag flag) that never stops
being written:

- When the ring is full, a push overwrites the oldest word.
- `snapshot` freezes a read-back at the newest word, and each `pop` returns the
  next older word one cycle later.
- The read-back keeps a count, `avail`, of how many of its words are still intact.
  A pop lowers the count by one. So does a push that overwrites the oldest word of
  the read-back. Because of this, a reader never receives an overwritten word,
  even while acquisition goes on.

The tag is written when the synchronised Fiducial edge arrives, so it comes just
before the measures of the first bunch.

If a measure and a Fiducial arrive in the same cycle, the measure is pushed first
and the tag one cycle later. The measure still carries the old coarse count. The
TDC's dead time guarantees that this cycle is free.

## Zero suppression (`data_selector`)

On an accepted T1, the Data Selector takes a snapshot and pops words newest
first. It copies each measure into the RAM buffer, together with its **cycle
index**: 0 for the revolution running at T1, and 1 for the one before. It stops
at the `NTAGS`-th tag (default 2), or earlier if the stack has nothing older. All
older words are never read, and that is the suppression. The selection closes
with a channel trailer that holds the number of measures copied.

If the RAM buffer runs short of space, measures are dropped. One word is always
kept free for the trailer, and the trailer's overflow bit is set.

Each stack word costs two cycles. The trailer adds one or two more, so `busy`
lasts `2*W + 1` cycles when a tag stops the selection and `2*W + 2` when the stack
runs empty. The window of two revolutions is a choice: the original description
does not say how many cycles are kept.

## Waiting for T2 (`ram_buffer`, `chan_master_if`)

The RAM buffer (64 x 32 bit) has three pointers: write, commit and read. Words
behind the write pointer but past the commit point belong to a selection that is
still waiting for T2, and cannot be read. The selection is committed when two
things have happened, in either order:

- T2 has arrived.
- The Data Selector has written its trailer.

A new T1 that finds no T2 for the previous selection rolls the write pointer back,
which discards that selection.

The Channel to Master Interface counts T2s that are still waiting for data. While
one is waiting and a committed word is present, it raises `data_rdy` and offers
the word with the channel number filled in. Each word is taken with a one-cycle
`ack`. The channel trailer closes one T2. The interface is one of the three state
machines that move the data, together with the Data Selector and the FSM Master.
Its state is just that count of pending T2s: zero means idle, and anything more
means sending.

## Triggers (`trigger_manager`)

T1 and T2 arrive asynchronously. Each goes through a 3-flip-flop synchroniser and
an edge detector. Three rules keep every channel and the master in step:

- A T1 is accepted only if acquisition is enabled and no channel's Data Selector
  is busy. Otherwise it is counted as lost.
- A T2 is passed on only if an accepted T1 is waiting for it. Otherwise it is
  counted as an orphan.
- With each T2, the KLOE signals word is latched for the event header. Its meaning
  is not specified, so it is carried as an opaque 8-bit value.

## Event building (`fsm_master`, `data_fifo`)

T2s are queued, 8 deep, in the FSM Master. For each one, the master writes 64-bit
words into the Data FIFO:

| word | bits 63:56 | 55:32 | 31:0 |
|------|-----------|-------|------|
| header | `E0` | event number | `[31:24]` KLOE word, rest 0 |
| data (0 or more) | two channel words, the earlier one in `[63:32]`; an odd last one is padded with zero | | |
| trailer | `F0` | event number | `[31]` overflow, `[30:16]` measures, `[15:0]` words in the event including header and trailer |

Channel word (32 bit): `[31:30]` kind (01 measure, 10 channel trailer, 00 fill,
11 no data), `[29:25]` channel, `[24]` overflow (trailer), `[19:16]` cycle index,
`[15:0]` time (measure) or count (trailer).

Channels are collected in the order 0..31. The master waits on a channel whose
selection is still running. Channel trailers are not copied. An event is therefore
16 + 8·⌈n/2⌉ bytes for n measures.

The Data FIFO holds 32768 x 64 bit (256 kB) and reads first-word-fall-through.
`full` stops the master.

## How much data an event costs

The zero suppression is judged by the event size for n measures per T2. With the
format above, an event takes 16 + 8·⌈n/2⌉ bytes. `tb_event_size` measures this
through the whole design and VME:

| measures per T2 | 0 | 1–2 | 3–4 | 5–6 | 10 | 20 | 28 |
|---|---|---|---|---|---|---|---|
| bytes | 16 | 24 | 32 | 40 | 56 | 96 | 128 |

At the luminosity the design was built for, most triggers carry only a few
measures. Weighting these sizes by the measured distribution of measures per
trigger gives roughly 34 bytes per trigger. That figure is an estimate read from
a histogram, and it is below the 40 bytes per trigger that the system was
reported to need. It is also negligible against the about 2 kB per event that the
rest of the experiment produces.

Other limits:

- One channel can deliver up to 63 measures per event before its RAM buffer
  overflows.
- The 256 kB Data FIFO holds 2048 of the largest events above.
- A revolution is 324 ns, which is 129.6 `clk` cycles. The 12-bit coarse counter
  therefore covers about 31 revolutions, should a Fiducial be missed.

## VME and registers (`vme_slave`, `status_control_regs`, `scaler`)

The VME slave answers when the top byte of A32 equals `VME_BASE` (default `0x10`):

- **A32 D32 single cycles** (AM 0x09 / 0x0D) reach the registers at offsets below
  0x1000.
- **A32 MBLT** block reads (AM 0x08 / 0x0C) pop the Data FIFO. The first data
  strobe is the address beat. Each later beat returns one 64-bit word, or all ones
  if the FIFO is empty.

Strobes are synchronised. DTACK* is driven low until the data strobes go high
again. The bus drivers outside the FPGA multiplex the 64-bit MBLT data onto the
address lines, so the top has split `vme_din`/`vme_dout`/`vme_dout_en` ports.

| offset | register |
|--------|----------|
| 0x000 | CONTROL: bit0 enable, bit1 clear scalers (pulse) |
| 0x004 | STATUS: bit0 FIFO has data, bit1 FIFO full, bit2 enabled |
| 0x008 | FIFO level (64-bit words) |
| 0x00C / 0x010 | T1 accepted / lost |
| 0x014 / 0x018 | T2 accepted / orphan |
| 0x01C / 0x020 | events built / T2 lost from the master queue |
| 0x100 + 4c | scaler of channel c (hits, saturating) |

## What is given and what is chosen

Taken from the original description:

- The 4xOversampling principle and its exact flip-flop schematic.
- 400 MHz and 625 ps, a 2-bit fine measure, and time counted from the Fiducial.
- 32 channels.
- The Stack buffer written on a measure or a Fiducial, with numbered Fiducial Tags,
  read newest-first.
- The chain TDC → Stack → Data Selector → RAM buffer → Channel to Master Interface
  → FSM Master → Data FIFO (256 kB) → VME slave (A32/D64).
- Where each trigger goes: T1 to the Data Selector; T2 to the RAM buffer, the
  Channel to Master Interface and the FSM Master.
- Data paths of 32 x 32 bits with 32 ready lines into the master.
- Status and Control Registers, a Trigger Manager and a rate scaler.

Chosen here:

- All word formats and widths (12-bit coarse, 15-bit tag numbers).
- The depths of the stack (1024), RAM buffer (64) and event queue (8).
- The selection window (two revolutions).
- The ring organisation of the stack.
- The commit/roll-back rule and the T1/T2 acceptance rules.
- The ack handshake towards the master.
- The event format.
- The register map.
- The VME subset: no BERR and no CR/CSR space.
- One clock for all logic, and the TDC dead time.

The original event format is not known. Its published event sizes, about 24 bytes
empty and about 98 bytes with 28 measures, differ from this design's 16 and 128
bytes.

Not included:

- The clock manager that makes the four phases. The top takes them as inputs.
- The VME bus drivers.
- The board's DDR2 memory, Ethernet, USB, RS232 and optical links.
- Unspecified debugging aids.

## Simulating

Testbenches are in `tb/`. Each one prints `TB_RESULT checks=N failures=M`.
`tb/clk4_gen.sv` makes the four clock phases. Example with Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    --top-module tb_het_daq_top rtl/het_pkg.sv tb/tb_het_daq_top.sv
./obj_dir/Vtb_het_daq_top
```

- `tb_het_daq_top` runs the whole design at its default size. It uses 26
  revolutions of realistic bunch structure and reads the data back over VME. It
  triggers every mechanism: normal events, T1 without T2, lost T1, orphan T2 and
  RAM-buffer overflow. Each event is checked word by word against a model.
- `tb_event_size` builds events with 0..28 measures and prints and checks their
  sizes.
- The other testbenches check one block each against an independent model.

Parameters worth changing: `NTAGS`, the number of revolutions kept per trigger;
`STACK_DEPTH`, which must cover the T1 latency; `RAM_DEPTH`; `FIFO_DEPTH`; and
`N_CH`, which can be at most 32 because the channel field is 5 bits.
