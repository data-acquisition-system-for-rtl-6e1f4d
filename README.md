# UDAQ: a processor-less data-acquisition FPGA for the UFFO pathfinder

The UFFO pathfinder is a small gamma-ray-burst observatory with two instruments: the UBAT, an
X-ray coded-mask telescope that detects a burst and finds its direction, and the SMT, a slewing
mirror telescope that turns to that direction within about a second to catch the early UV and
optical light. The UDAQ sits between them and the satellite. It powers the telescopes up only
when it is dark, passes the ground's commands on to them, turns a trigger into a pointing
command for the SMT, writes the event data of both telescopes into NOR flash, and hands the data
to the satellite when the satellite asks for them. All of this is done by state machines in one
low-power FPGA, with no processor.

This repository holds synthesizable SystemVerilog for that FPGA, written from the published
description of the instrument (G. W. Na et al., "Data Acquisition System for the UFFO
Pathfinder", UFFO collaboration). That description gives the architecture, the command format,
the data sizes and the rates, but not the internal protocols. Every code, handshake and frame
layout below that is not a published number is this design's own choice. The last section lists
these choices.

## Blocks

```
             satellite Bus-Interface (SPI master)
                          |  SCLK MOSI MISO CS_N, bi_type[2:0], bi_attn, bi_drdy
                     +----+----+
          minute --> |   biu   |----- commands ----> ccu ---- 64-bit frames --+
          pulse      +----+----+                     |  power, thresholds     |
                          | time, coordinates        v                        v
                          +-------------------->    ctu                      iiu ---- SPI ---> SMT
                          | external trigger                                  ^  \--- SPI ---> UBAT
                          v                                                   |
      ubat_trig ------>  tau  -- ev_start -->  dpu  -- coordinate / data reads-+
                                                |
      commands --> cfg_store -- play-back --> ccu  |
                       |                        |
                       +-------> mem_arb <------+
                                    |
                                 nor_ctrl ---- 4 x 64 Mbit NOR flash
      photo[4], temp[10], i5, i12 -->  hku -- alarm --> ccu (telescopes off, safe mode)
```

| Module | Block | Job |
|---|---|---|
| `biu` + `spi_slave` | Bus Interface Unit | SPI slave to the satellite: decodes incoming frames, sends the status block and event data |
| `ccu` + `cmd_decode` | Central Control Unit | power-up sequence, telescope power, carries out UDAQ commands, routes telescope commands |
| `ctu` | Coordinate & Time Unit | stores the four kinds of coordinates, runs the clock |
| `tau` | Trigger Arbiter Unit | takes a UBAT trigger or an external trigger and starts an event |
| `dpu` | Data Processing Unit | handles an event from start to finish and stores it in flash; reads events back |
| `iiu` + `spi_master` | Internal Interface Unit | SPI master to both telescopes; holds back commands while an event is being collected; polls each telescope's status word |
| `nor_ctrl` | Memory Control | 16-bit flash writes (7 us) and reads |
| `cfg_store` | (flash chip 0) | keeps the latest configuration commands in chip 0 and plays them back |
| `mem_arb` | | shares the flash controller between `dpu` and `cfg_store` |
| `hku` | Housekeeping Unit | compares monitored values with thresholds |
| `udaq_top` | | connects all of the above |
| `udaq_pkg` | | shared types: command word, coordinates, time, frame codes, status block |

## The command word

The ground sends 32-bit commands. The UDAQ uses the published layout:

| Bits | Field | Codes used here |
|---|---|---|
| 31:29 | header | 1 single, 2 packet (anything else is counted as a bad command) |
| 28:24 | applicable system | one bit each: 24 UDAQ, 25 SMT, 26 UBAT (more than one bit may be set) |
| 23:22 | run type | 1 calibration, 2 science |
| 21:16 | content | 1 state & transition, 2 set, 3 set parameter |
| 15:10 | sub content | see below |
| 9:0 | value | |

The UDAQ carries out these commands itself:

- set/1: day or night (value bit 0 = 1 means night);
- set/2: run type for the next configuration;
- set parameter/1..4: thresholds for photo sensors, temperatures, 5.2 V current and 12 V current;
- state/2: clear the alarms and leave safe mode.

A command for the SMT or the UBAT is passed on as a 64-bit frame. The frame is the 32-bit command
with a 32-bit indicator in front: `{8'hC1, target (0 SMT, 1 UBAT), 16-bit sequence number,
command}`. All 64-bit frames to the telescopes begin with a code byte:

| Code | Frame | Length | Telescope's answer |
|---|---|---|---|
| `C1` | command | 64 | none |
| `C2` | trigger direction `{C2, 00, coordinate}` | 64 | none |
| `C3` | read relative coordinate (UBAT) | 64 | coordinate in the last 48 bits |
| `C4` | read one data word | 32 | word in the last 16 bits |
| `C5` | time `{C5, target, time}` | 64 | none |
| `C6` | read status word | 32 | the telescope's 16-bit status word in the last 16 bits |

The telescope links use SPI mode 0, most significant bit first. At the default `SPI_HALF = 14`,
one bit takes 28 cycles (0.58 us at 48 MHz), so a 64-bit command lasts 37.6 us. This is close to
the roughly 36 us of a recorded UDAQ-to-SMT command.

## The link to the satellite

The satellite's Bus-Interface is the SPI master. Besides SCLK, MOSI, MISO and CS_N it drives
three extra lines, `bi_type`, which say what the frame carries (`bi_frame_e`):

| Code | Frame | Bits | Effect |
|---|---|---|---|
| 0 | command | 32 | decoded by `ccu` |
| 1 | time | 48 | loads the clock: year (from 2000), month, day, hour, minute, second, 8 bits each; passed on to powered telescopes in a `C5` frame |
| 2 | satellite coordinate | 48 | stored |
| 3 | BDRG coordinate | 48 | stored |
| 4 | UBAT absolute coordinate | 48 | stored; clears the request for it |
| 5 | external trigger | 48 | stored as BDRG coordinate, and starts an event |
| 6 | status read | up to 416 | the UDAQ sends the status block, then the 16 monitored values and the two telescopes' status words |
| 7 | data read | 16 per word | the UDAQ sends the next words of the oldest stored event |

A coordinate is an 8-bit indicator (which component: X, Y, Z, theta, phi, ...) followed by a
40-bit value. A frame of the wrong length is dropped and counted.

The UDAQ drives two lines back. `bi_attn` is high while an alarm, a telescope emergency or a
request for an absolute coordinate is waiting. `bi_drdy` is high while a stored event waits to
be read.

The status block (`status_t`) is sent most significant bit first:

| Bits | Content |
|---|---|
| 127:124 | control state (0 housekeeping, 1 waiting for dark, 2 powering, 3 configuring, 4 ready, 5 safe) |
| 123, 122 | SMT and UBAT power |
| 121 | night |
| 120 | the UBAT's relative coordinate waits for its absolute coordinate |
| 119 | an event is ready |
| 118:117 | emergency latched from SMT, UBAT |
| 116 | alarm |
| 115:112 | telescope commands rejected because the queue was full (saturates at 15) |
| 111:96 | one alarm bit per monitored value: 0-3 photo, 4-13 temperature, 14 5.2 V current, 15 12 V current |
| 95:48 | last UBAT relative coordinate |
| 47:40 | events stored since reset |
| 39:32 | triggers lost |
| 31:0 | length in words of the event waiting to be read |

After these 8 words, a status frame continues with the 16 monitored values as `{6'b0, value}`
words, in the order of the alarm bits. Words 24 and 25 are the last status words read from the
SMT and the UBAT. A 128-bit frame therefore reads the status block alone.

Data are sent in 16-bit words, and a word counts as delivered only when all 16 of its bits have
gone out. So the satellite can read an event in frames of any whole number of words. The UDAQ
samples the link with its own clock and accepts SCLK up to a sixth of it. At 48 MHz that is
8 MHz, which carries the required 1 Mbyte/s. To keep that pace, the next two words of the event
are always fetched from flash ahead of time.

## Power-up and safe mode

`ccu` starts in the housekeeping state after reset and goes through these steps:

1. **Housekeeping.** It restores the UDAQ's own parameters (thresholds, run type) from the
   configuration store. It also waits for the first complete scan of the monitored values.
2. **Waiting for dark.** It waits until the satellite has said it is night *and* no photo sensor
   reads above its threshold. This protects the SMT's intensified CCD from light.
3. **Powering.** It switches on the 5.2 V / 12 V supplies of both telescopes and waits
   `PWR_SETTLE` cycles.
4. **Configuring.** It sends a run-start command, carrying the stored run type, to the SMT and
   then to the UBAT. If the satellite has ever returned an absolute coordinate for a UBAT
   trigger, the latest one is then sent to the SMT as a `C2` frame. This lets the SMT look for
   the same object again in the next orbit. Last, every telescope command in the configuration
   store is sent again, so the telescopes get the parameters the ground last set. The unit goes
   on to step 5 once all of these are queued.
5. **Ready.** Triggers are accepted. When the satellite reports day, the telescopes are switched
   off once any event in progress has finished, and the unit goes back to step 2.

Every `HK_SCAN` cycles, `hku` copies the 16 monitored values into its register and compares each
with the threshold for its kind. Photo sensors raise an alarm only while the SMT is powered.
Before that, light only keeps the telescopes off. Alarm bits stay set until a clear command. Any
alarm switches both telescopes off at once and puts the unit into safe mode. Safe mode ends only
with a clear-alarm command, after which the sequence starts again from step 1. A telescope's
emergency line is latched and reported to the satellite, but no other action is taken.

While the telescopes are powered, `iiu` asks each of them for a 16-bit status word, the SMT and
the UBAT in turn, one every `TEL_POLL` cycles (0.1 s). It uses a 32-bit `C6` frame. The answer
is kept and sent to the satellite with the status block. A poll has the lowest priority: it
waits while an event is being collected, a transfer is asked for or a command is queued. It
therefore delays other traffic by at most one 32-bit frame (19 us). What the word means is up
to the telescope.

## Event processing

This is the busiest path, and its timing decides how much data an event can hold. `tau` accepts a
trigger only in the ready state and only while no event is being processed. Either the UBAT
raises its trigger line, or the satellite sends an external-trigger frame. Triggers arriving at
other times are counted as lost, and the UBAT wins if both arrive in the same cycle. `dpu` then
works through these steps:

1. **Slot.** It takes the next event slot. Chip 0 of the flash holds the configuration.
   Chips 1 to 3 hold `NSLOTS = 2` slots of `SLOT_WORDS = 2,621,440` words (5 Mbyte each), starting at word
   `0x400000`. Slots are used in turn and freed once read out. If the next slot is still full,
   the trigger is lost.
2. **Direction.** For a UBAT trigger, the UDAQ reads the UBAT's relative coordinate. The
   coordinate is stored, shown in the status block and flagged on `bi_attn`, so that the
   satellite can compute the absolute sky position and send it back. For an external trigger, the
   BDRG coordinate that came with it is used. The direction goes to the SMT in a `C2` frame. An
   external direction also goes to the UBAT.
3. **Header.** Seven words are written:
   - `{4'hE, 3'b0, source, event number}`;
   - the time at the trigger (year/month, day/hour, minute/second);
   - the 48-bit trigger coordinate.
4. **Data.** Data are collected first from the SMT and then from the UBAT. The UDAQ waits up to
   `DRDY_WAIT` cycles for a telescope's data-ready line to rise. While the line is high it fetches
   one word at a time with a 32-bit `C4` transaction and writes it to flash. A telescope drops
   the line after its last word. If the slot fills up, the event is cut off at the slot size.
5. **Ready.** The slot is marked ready with its length, `bi_drdy` rises, and the satellite reads
   the event with data-read frames.

From step 2 to the end of step 4, `iiu` holds back queued commands for the telescopes. They are
sent in order once collection ends. The queue holds 8 frames, and a command that finds it full
is rejected and counted. The event's own transfers to the telescopes are not held back.

Timing per data word at the defaults: the 32-bit read takes 65 x 14 = 910 cycles, and the flash
write 336 + 2 cycles (7 us). A word therefore costs about 26 us. A full 5 Mbyte event would take
about 68 s to collect. Reads and writes are not overlapped.

## Configuration kept in flash chip 0

Chip 0 holds the latest configuration from the ground, so that it survives a power cycle. The
UDAQ counts as configuration every valid command whose content is *set* or *set parameter*.
The UDAQ's own day/night setting is excluded: it is state, not configuration. `cfg_store`
writes such a command into an entry for each system the command names. Each combination of
system, content and sub content has its own two-word entry, at word address

```
2 * {system[1:0], content == set-parameter, sub[5:0]}     (high half first)
```

So the first 768 words of chip 0 are used, and a newer command replaces the older one with the
same meaning. Commands arrive faster than entries are written (two programming times, about
14 us per system). They wait in a 4-deep FIFO; one that finds the FIFO full is dropped and
counted.

Play-back scans a range of entries:
- the UDAQ entries at every start of the power-up sequence;
- the SMT and UBAT entries during configuration.

An entry counts as holding a command only when its header is valid and its content and sub
content match its position. So erased flash (all ones) and unwritten flash (all zeros) are both
skipped. A command found is offered with a valid/ready handshake:
- `ccu` carries out a UDAQ command as if it came from the satellite;
- `ccu` queues a telescope command as a `C1` frame when the queue has room.

A scan reads two words per entry. That is about 2,000 cycles for the UDAQ range and 4,000 for
the telescope range, plus the wait for the queue.

`mem_arb` lets `dpu` and `cfg_store` share the flash controller. An event-processing request is
never lost: it waits at most for one configuration write to finish. Entries are written over in
place without an erase. That works with the flash model used here, but a real NOR part needs an
erase, or an append-only log, before an entry is written again.

## Memory control

`nor_ctrl` drives four chip enables (address bits 23:22), a shared 22-bit address, OE_N, WE_N
and a 16-bit data bus with a separate output enable. For a write it holds WE_N low for
`WE_CYC` cycles and keeps CE_N, address and data one cycle longer. It then waits until
`WRITE_CYC = 336` cycles (7 us) have passed. For a read it keeps OE_N low for `READ_CYC = 5`
cycles (104 ns, above the 90 ns access time) and captures the data. The controller sends no flash
command sequences, does not poll the flash status and never erases. A real NOR part needs all
three (see below).

## Time and coordinates

`ctu` keeps one entry for each indicator 0..7 of each of the four coordinate kinds, plus the
last coordinate written of each kind. The clock counts seconds from `CLK_HZ` and carries through
minutes, hours, days (with month lengths and leap years), months and years. On each rising edge
of the satellite's one-minute pulse, the clock snaps to the nearest whole minute and restarts its
second counter.

## Parameters of `udaq_top`

| Parameter | Default | Meaning |
|---|---|---|
| `CLK_HZ` | 48,000,000 | system clock (the source gives no clock frequency) |
| `SPI_HALF` | 14 | half SCLK period to the telescopes, in cycles |
| `QDEPTH` | 8 | telescope commands held during collection |
| `WRITE_CYC` | 336 | flash programming time per word (7 us) |
| `READ_CYC` | 5 | flash read time (> 90 ns) |
| `SLOT_WORDS` | 2,621,440 | words per event slot (5 Mbyte) |
| `NSLOTS` | 2 | event slots |
| `DRDY_WAIT` | 48,000 | wait for a telescope's data-ready line (1 ms) |
| `PWR_SETTLE` | 48,000 | wait after power-on (1 ms) |
| `HK_SCAN` | 4,800 | housekeeping scan period (100 us) |
| `TEL_POLL` | 4,800,000 | period of the telescope status polls (0.1 s) |

All logic runs on one clock with one active-low asynchronous reset. The SPI and trigger inputs
are synchronised internally.

## Simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. The helpers `sync_fifo` and
`mem_arb` are tested inside the blocks that use them. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of cycles. The testbenches
use behavioural models of the other equipment:

- `tb/bi_master.sv`: the satellite's SPI master;
- `tb/tel_model.sv`: a telescope's SPI slave, with data-ready line and coordinate;
- `tb/nor_flash_model.sv`: the flash.

For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/udaq_pkg.sv tb/tb_udaq_top.sv --top-module tb_udaq_top -o sim
./obj_dir/sim
```

`tb_udaq_top` runs the whole FPGA at its default parameters in about ten seconds, covering:

- the power-up sequence (including staying off while light is seen) and command forwarding;
- a UBAT trigger, with its relative coordinate, the returned absolute coordinate and a word-exact
  read-back of the event;
- two external triggers and a third that finds both slots full;
- commands held during collection and one rejected when the queue overflows;
- the minute pulse and an emergency line;
- an over-temperature alarm with safe mode, a read-back of the 16 monitored values, and the
  clearing of the alarm;
- the satellite's time passed on to both telescopes;
- the status words polled from both telescopes, read back in a status frame;
- the returned absolute coordinate arriving at the SMT with the new configuration;
- the stored configuration commands sent again to both telescopes at that configuration;
- a reset, after which a stored UDAQ threshold comes back from the flash;
- switch-off at day.

It counts each of these and fails if one never happened. The block testbenches check the rest in
detail:

- exact SPI bit timing, and the field positions of the command word;
- calendar roll-over, including leap days;
- 7 us flash writes;
- the 1 Mbyte/s stream to the satellite without lost words;
- cutting an event off at the slot size.

`verilator --lint-only -Wall -Irtl rtl/udaq_pkg.sv rtl/udaq_top.sv` reports only two kinds of
warning:
- unused package constants and signals, such as the counters `frame_err` and `bad_cmds` and the
  read port of the coordinate table, which no output carries;
- a reset that is used both as an asynchronous reset and in the `disable iff` of an assertion.

## Where this design goes beyond the source, and what it leaves out

Taken from the published description:

- the block structure;
- SPI with the UDAQ as slave to the satellite and master to both telescopes;
- the 32-bit command layout and the 64-bit forwarded command;
- 48-bit coordinates with an 8-bit indicator, and six 8-bit time fields;
- the minute pulse;
- 16-bit words into 4 x 64 Mbit NOR flash at 7 us per word, with reads above 90 ns;
- chip 0 set apart for the latest configuration (and a look-up table);
- two events of about 5 Mbyte;
- 1 Mbyte/s to the satellite;
- 4 photo sensors, 10 temperature sensors, and currents of the 5.2 V and 12 V supplies compared
  with thresholds, with telescopes switched off on an alarm;
- the power-up order: housekeeping, then day/night, then power, then configuration;
- holding and resuming control commands during data collection.

This design's own choices:

- all numeric codes (command fields, frame codes, frame-type lines);
- the status block;
- the event header;
- the data-ready handshake and the order SMT before UBAT;
- the SPI mode and bit order;
- the clock frequency and all waits;
- sending the absolute coordinate to the SMT at configuration, and the monitored values after the
  status block;
- which commands count as configuration, the layout of chip 0, and when it is played back;
- passing the time on to the telescopes in a frame of its own;
- the telescope status poll: its frame, its 16-bit word and its period;
- the queue depth;
- rounding at the minute pulse;
- dropping triggers while busy.

The source says the three data chips store two 5 Mbyte events, although they would have room
for four. This design keeps two slots.

Not built:

- **Chip 0 look-up table.** The look-up table for coordinate and trigger calculation, which
  shares chip 0 with the stored configuration, is not built: its contents are not described.
  Configuration here is a run-start command per telescope, plus the stored commands.
- **Calibration Run Unit, Run Summary and internal memory.** These blocks are only named.
- **Flash programming.** Flash erase, and the command sequences and status polling of a real NOR
  part, are not built. Before slots are reused on hardware, `nor_ctrl` needs them.
- **Meaning of the telescopes' housekeeping.** One 16-bit word per telescope is polled and
  kept. The source gives no format, so the word is passed on uninterpreted and raises no alarm.
- **Commands to switched-off telescopes.** Commands still queued when the telescopes are
  switched off are sent anyway.
- **Emergency response.** The response to a telescope emergency is reporting only. The actions
  prescribed for it are not described.
- **Transfer during collection.** The satellite cannot read events while another event is being
  collected. Data-read frames are answered with stale words then, and `bi_drdy` is low.
