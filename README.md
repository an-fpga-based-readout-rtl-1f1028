# ETROC2 digital emulator: readout logic for the CMS Endcap Timing Layer

The Endcap Timing Layer of the CMS MIP Timing Detector is read out by ETROC2.
This ASIC has 16x16 pixels. Each pixel measures time of arrival (TOA) and time
over threshold (TOT) of signals from a Low-Gain Avalanche Detector. The chip
keeps every pixel's measurement for each 25 ns bunch crossing (BX). When the
trigger system sends a Level-1 Accept (L1A), the chip ships the hits of the
selected crossing as an event over a 320 Mbps serial link. The same link also
carries a small, continuously updated hit map for monitoring (the *trigger path*).

This RTL reproduces the digital side of ETROC2 so that it can run in an FPGA
before silicon exists. One board holds four emulated chips. The board also
holds the counterparts a readout board or DAQ system would normally provide:

- a fast-command generator;
- one data checker per output.

Three parts of the design are the hardest to follow, and they get the most room
below:

- **the switching network**, a fully combinational priority chain. It picks one
  pending pixel per crossing out of 256 (section 4);
- **the frame format and its CRC**, whose exact bit layout and polynomial were
  fixed by matching captured frames (section 6);
- **how the link is shared** between trigger bits and frame bits. This is
  where a backlog stalls the readout (section 7).

## 1. One chip, one crossing at a time

```
  fc (320 Mbps) --> fast_command_decoder --> L1A / BCR / ECR (applied at next BX strobe)

  per pixel (256x):  pixel_data_gen --> circular_buffer --L1A--> l1a_event_buffer --+
                                                                                    |
                       switching_network (column chains + row chain) <--------------+
                              |  one pixel per BX, while granted
                       readout_controller --records--> sync_fifo (global data stream buffer)
                                                           |
                       frame_builder (header / data / trailer+CRC / filler, 40 bit)
                                                           |
                       scrambler (x^58 + x^39 + 1)         |
                                                           v
  trigger_path --n bits--> link_composer (n trigger bits + 8-n frame bits per BX)
                                                           |
                                                serializer --> DOL, DOR (320 Mbps)
```

Everything runs on one 320 MHz clock. A free-running divide-by-8 counter
produces `bx_en`, a one-clock strobe once per crossing. Every per-crossing
action in the chip happens at that strobe. Examples:

- a pixel writes its circular buffer;
- the network hands over one pixel;
- the link composer builds the next 8-bit word;
- the serializer loads that word.

One crossing is therefore exactly 8 serial bits at 320 Mbps. A decoded fast
command is held and applied at the next strobe.

The 12-bit bunch counter:

- clears on BCR;
- also wraps by itself after 3564 crossings (one LHC orbit).

The L1A counter is 8 bits and clears on ECR.

## 2. Fast commands

Commands are 8-bit words, sent MSB first at 320 Mbps, one per crossing. This
design uses these codes:

| command | code | purpose |
|---|---|---|
| IDLE | `F0` | nothing; also the alignment pattern |
| L1A  | `96` | read out the crossing `latency` BX ago |
| BCR  | `5A` | bunch counter reset |
| ECR  | `33` | event counter reset |

Every pair of codes differs in exactly 4 bits. A single flipped bit is
therefore always corrected. A double flip is detected as an error, never
mistaken for another command.

The decoder (`fast_command_decoder`) does not know where a word starts:

1. While unlocked, it checks the last 8 received bits for an exact IDLE at
   every bit position.
2. The position where IDLE is found becomes the candidate boundary.
3. At each following boundary, it compares the word with all four codes:
   - distance 0: accepted;
   - distance 1: corrected, and a `corrected` pulse is raised;
   - distance 2 or more: counted as an error.
4. Four decodable words in a row give lock.
5. Four uncorrectable words in a row drop the lock and restart the search.

The DAQ-side `fast_command_generator` sends one word per crossing. Its priority
order is:

1. automatic BCR on the last crossing of each orbit;
2. ECR request;
3. L1A (on request, or randomly at probability `l1a_rate`/65536 per crossing);
4. IDLE.

An error-injection input flips one chosen bit of every word. This exercises
the chip's correction.

## 3. Pixels: source, circular buffer, event buffer

Each pixel (`pixel`) chains three parts.

- **`pixel_data_gen`** produces a 30-bit word {DV, TOA[9:0], TOT[8:0],
  CAL[9:0]} every crossing, in one of two modes:
  - *Dummy TDC data*: a 32-bit LFSR seeded from the pixel address. The pixel is
    hit when 8 random bits fall below `occupancy` (probability
    `occupancy`/256), and the fields are random.
  - *Test pattern*: the pixel is hit when its bit in `tp_hit` is set. The
    fields encode the address: TOA = {row, col, 00}, TOT = {0, row, col},
    CAL = {00, col, row}. A receiver can therefore check each data frame
    against its own address.
- **`circular_buffer`**: 512 words, written every crossing. The read port
  points `latency` entries behind the write pointer, so its output is always
  the word of the crossing an L1A now refers to. 512 crossings are 12.8 us.
- **`l1a_event_buffer`**: 8 entries. Every accepted L1A writes one entry into
  every pixel, hit or not. All 256 event buffers therefore move in lockstep,
  and the readout controller keeps a single write and read pointer for all of
  them. Next to the buffer sits the pixel's flip-flop, "already sent":
  - *own_valid* = the oldest entry is a hit and has not been sent yet;
  - reading the pixel sets the flag;
  - the end of the event (`pop`) clears it.

## 4. The switching network

After an L1A, some pixels (often none, sometimes many) hold a hit for that
event. The network's job is to pass them, one per crossing, to a single output
without any central arbiter. Every pixel has a `switching_cell`, a few gates of
pure combinational logic:

```
  downstream data  = own_valid ? own data : upstream data
  downstream valid = own_valid | upstream valid
  grant to upstream = grant_in & ~own_valid      (control flows upward)
  own_read          = grant_in &  own_valid
```

Data flows *down* the chain and passes through every empty cell. The grant
flows *up* and is swallowed by the first non-empty cell it meets. So a cell
always beats everything upstream of it, and exactly one cell in the whole
chain sees `own_read`. That cell's sent flag is set at the crossing strobe,
and the next crossing grants the next pending pixel. When nothing is valid at
the output, the event has been fully read.

**Column chains.** The 16 pixels of a column form one chain. Row 0, at the
bottom, is the downstream end, so row 0 has the highest priority and row 15
the lowest.

**Row chain.** The 16 column outputs are merged by 15 further cells, numbered
as in the published block diagram. In that diagram, column 15 is drawn on the
far left and column 0 on the far right:

```
  col15 -> [14] -> [13] -> ... -> [8] --own--> [0] <--up-- [7] <- ... <- [2] <- [1] <- col0
           own=14  own=13        own=8          |         own=7         own=2  own=1
                                                v
                                    global data stream buffer
```

The left half is a chain that runs rightwards into the centre cell's own
input. The right half is a chain that runs leftwards into the centre cell's
upstream input. The resulting priority is:

| priority | 1 | 2 | ... | 8 | 9 | 10 | ... | 16 |
|---|---|---|---|---|---|---|---|---|
| column | 8 | 9 | ... | 15 | 7 | 6 | ... | 0 |

So the column just left of the centre comes first, and the rightmost column (0)
comes last. Within each column, rows go bottom up.

Because all 271 cells are combinational, the whole decision settles within one
320 MHz clock:

- the path runs through at most 16 column cells and 8 row cells;
- each cell is a 2:1 multiplexer plus an AND gate.

`switching_network` builds the column chains with per-cell nets inside each
generate scope. This keeps the combinational chain free of self-referencing
arrays. Each pixel's data leaves its cell already tagged with its row and
column address.

## 5. Event bookkeeping and the global data stream buffer

`readout_controller` sequences the readout. It works in units of records
rather than frames.

- **On L1A.** The 8-bit L1A counter always advances. Then:
  - *If an event-buffer slot is free*, every pixel stores the word selected by
    the circular buffer. The event's L1A count and triggered BCID
    (`bcid - latency`, modulo the orbit) are queued.
  - *If all 8 slots are busy*, the L1A is **dropped**. The drop is counted in
    `l1a_dropped`, and bit 0 of the next trailer's status is set.
- **Readout, one step per crossing, only while the buffer has room.**
  - *IDLE*: an event is waiting. Write a header record {type, L1A count, BCID}.
  - *DATA*: grant the network.
    - If a pixel answers, write its hit record and count it.
    - If none answers, write the end record {status, hit count}, release the
      event slot and return to IDLE.
- **Stall.** If the buffer is full, the grant is withheld, so the network is
  frozen. Each such crossing is counted in `stall_bx`.

The global data stream buffer is a 16-entry, 39-bit synchronous FIFO
(`sync_fifo`). Each entry is a 2-bit record kind plus a 37-bit payload.

## 6. Frames and the event CRC

The output stream is a sequence of fixed 40-bit frames, sent MSB first. The
frame type can be told apart from the first bits alone:

| frame | bits 39 .. 0 |
|---|---|
| data    | `1`, status[1:0], row[3:0], col[3:0], TOA[9:0], TOT[8:0], CAL[9:0] |
| header  | `3C5C` (16 bits), `0`, type[2:0], L1A count[7:0], BCID[11:0] |
| filler  | `3C5C` (16 bits), `1`, type[2:0], L1A count[7:0], BCID[11:0] |
| trailer | `0`, chip ID[16:0], status[5:0], hit count[7:0], CRC[7:0] |

An event is a header, one data frame per hit pixel, and a trailer. A filler
goes out whenever the buffer has nothing to send. The header's `type` is
{00, data mode}, so 1 means test pattern.

**CRC.** The event CRC is CRC-8 with:

- polynomial x^8 + x^5 + x^3 + x^2 + x + 1 (0x2F);
- initial value 0;
- bits fed MSB first;
- no final XOR.

It covers the header, every data frame and the trailer's upper 32 bits, that
is, everything before the CRC byte itself. Fillers are not covered.
`etroc_pkg::crc8_update` is the one implementation used by the chip and the
checker.

The layout and the CRC definition were fixed by matching real captures. This
test-pattern event for chip ID `1ABCD` is reproduced bit for bit:

```
header   3C5C15916F   type 1, L1A count 0x59, BCID 0x16F
data     9B9B84787F   row 13, col 12
data     9C5C447968   row 14, col 2
trailer  6AF3400268   chip 1ABCD, status 0, 2 hits, CRC 0x68
```

A one-hit event (`8AAAA47989`, row 5, col 5) ends in `6AF340017B`, with CRC
0x7B. Both CRCs come out of the definition above.

`frame_builder` always holds the next frame ready. When the link takes it, the
builder pops one record and forms the frame after it. A header record restarts
the CRC, and an end record appends the accumulated CRC.

**Scrambler.** Frames then pass through a self-synchronous scrambler,
x^58 + x^39 + 1, applied 40 bits at a time in transmission order:
s[n] = d[n] ^ s[n-39] ^ s[n-58]. The receiver undoes it bit-serially without
knowing where frames start. `scramble_en = 0` bypasses the scrambler.

## 7. Sharing the link: trigger bits and frame bits

Each crossing sends one 8-bit word. `link_composer` fills it as follows:

- the first n bits are trigger bits, with n = `n_trig`, 0..6;
- the remaining 8-n bits are frame bits.

A 48-bit gearbox takes a new 40-bit frame whenever fewer than 8-n bits are
left, and hands out 8-n bits per crossing. The bandwidth consequences:

| n | frame bits / BX | BX per frame | max frames per orbit |
|---|---|---|---|
| 0 | 8 | 5   | 712 |
| 1 | 7 | 5.7 | 623 |
| 2 | 6 | 6.7 | 534 |
| 4 | 4 | 10  | 356 |
| 6 | 2 | 20  | 178 |

An event with k hits costs k+2 frames. The network can deliver a hit every
crossing, but the link drains one frame every 5 to 20 crossings. At high
occupancy or a high L1A rate, the 16-entry buffer therefore fills, and the
network stalls (section 5). Beyond that, the 8 event slots fill and L1As
start to be dropped. The end-to-end test deliberately drives the design into
both conditions.

**Trigger path.** `trigger_path` ORs the current crossing's hits, for pixels
enabled in `trig_mask`, into 1, 2, 4 or 16 blocks:

| `trig_gran` | blocks | bit numbering |
|---|---|---|
| 0 | 1 (whole chip) | one bit |
| 1 | 2 (2x1) | bit 0 = columns 0-7, bit 1 = columns 8-15 |
| 2 | 4 (2x2) | bit index {row half, column half} |
| 3 | 16 (4x4 blocks of 4x4 pixels) | bit index {row/4, col/4} |

The first n bits of that map are sent in the word, trig[0] first. From
crossing `gap_start` to the end of the orbit (the beam gap), every trigger bit
instead carries a "flashing" value that toggles once per orbit. A receiver
can lock onto this pattern.

**PRBS mode.** With `prbs_en`, each output sends PRBS 2^7-1 (x^7 + x^6 + 1)
in place of words. No frames are consumed in this mode. It is the link test
used to establish a bit-error rate.

`serializer` loads the word at the crossing strobe and shifts it out MSB
first. DOL and DOR carry the same stream.

## 8. DAQ side: the data checker

One `data_checker` per received output. It works in these stages:

1. **Word alignment.** The serial input is cut into 8-bit words at a chosen
   phase of the local 8-clock cycle. If no frame lock is reached within 2048
   crossings, the phase is slipped by one bit (counted in `slips`). This lets
   the checker find the word boundary on its own.
2. **Split.** The first n bits of each word are trigger bits. The rest are
   processed one bit per clock.
3. **Descrambling**, bit-serially.
4. **Frame alignment.** A `3C5C` marker in the 40-bit window proposes a frame
   boundary. Four further markers at frame-aligned positions give lock.
   - A frame that is none of data, marker, or a trailer with the expected chip
     ID counts against the lock.
   - Four such frames in a row lose it.
5. **Checks** while locked:
   - headers and fillers may only come between events;
   - data and trailers may only come inside an event;
   - the trailer's hit count must equal the data frames seen.

   Any violation is a *format error*. A trailer CRC that differs from the
   recomputed one is a *CRC error*. Frames, events, hits and fillers are
   counted.
6. **PRBS 2^7-1 check** on the raw bit stream: every bit must equal the XOR of
   the bits 7 and 6 before it. Bits and errors are counted after a short
   warm-up.

## 9. The board: `etl_emulator`

`etl_emulator` is the top. It contains:

- four `etroc_emu` chips;
- one fast-command generator;
- eight data checkers.

The board's cable has only two fast-command pairs, so chips 0 and 1 listen to
`fc_in[0]` and chips 2 and 3 to `fc_in[1]`. The generator drives both
`fc_out` pairs. Checker lane 2i receives chip i's DOL, and lane 2i+1 its DOR.

The chip side and the DAQ side meet only at ports. Either of two setups
therefore works:

- **Loopback:** the testbench connects `fc_out`→`fc_in` and `dol`/`dor`→
  `dol_in`/`dor_in`, so the board checks itself.
- **Cross-connection:** two boards are wired to each other.

Slow control is a port, because the I2C target is not part of this RTL:

- each chip's `cfg` is an `etroc_cfg_t` (table below);
- the checkers take the expected chip ID, `n_trig`, descrambling and PRBS
  settings.

| `cfg` field | meaning |
|---|---|
| `chip_id` (17 b) | written into every trailer |
| `latency` (9 b) | L1A latency in crossings, 1..511 |
| `data_mode` | 0 dummy TDC data, 1 test pattern |
| `occupancy` (8 b) | dummy-hit probability per pixel per crossing, /256 |
| `tp_hit` (256 b) | test-pattern hit map, bit row*16+col |
| `trig_mask` (256 b) | pixels feeding the trigger path |
| `trig_gran` (2 b) | 1 / 2 / 4 / 16 trigger blocks |
| `n_trig` (3 b) | trigger bits per crossing, 0..6 |
| `gap_start` (12 b) | first crossing of the beam gap |
| `scramble_en`, `prbs_en` | scrambler on; PRBS link test instead of data |

Each chip reports `etroc_status_t`:

- FC lock;
- FC words corrected and FC errors;
- L1As received;
- L1As dropped;
- stalled crossings.

A generic synthesis of the top at full size comes to about 79k flip-flop bits
plus 16 Mbit of memory arrays. The memory is mostly the 1024 circular buffers
of 512 x 30 bits. It also reports roughly 107k generic cells.

## 10. Verification

Each module has a self-checking testbench in `tb/`. Each one compares against
a model written independently in the testbench, and ends with a line
`TB_RESULT checks=N failures=M`. Highlights:

- `tb_switching_cell`, `tb_switching_network`: every cell, and random
  occupancy patterns of the full 16x16 network, checked against the expected
  priority order (col 8..15, then 7..0; rows bottom up).
- `tb_frame_builder`: reproduces the captured frames above bit for bit,
  including both CRC values, plus random events.
- `tb_scrambler`: descrambles with the serial recurrence.
- `tb_link_composer`: the trigger/frame split and the frame consumption rate
  for n = 0, 1, 3 and 6, and the PRBS sequence.
- `tb_fast_command_decoder`: a random boundary offset, correction of
  single-bit errors, detection of two-bit errors, loss and recovery of lock.
- `tb_readout_controller`, `tb_pixel`, `tb_circular_buffer`,
  `tb_l1a_event_buffer`, `tb_sync_fifo`: latency selection, overflow drops,
  stall behaviour, pointer wrap.
- `tb_etroc_emu`: one full-size chip, with events decoded from the serial
  output and compared with the test pattern.
- `tb_etl_emulator`: the whole board at its default size (4 chips, 16x16
  pixels, 512-deep buffers), in loopback, for about five orbits.
  - It checks that all eight lanes lock, that there are no CRC or format
    errors, and that every lane reports all events its chip accepted.
  - It requires each mechanism to have happened at least once: FC bit
    correction, L1A drops at overflow, network stalls, fillers, word-boundary
    slips, BCR, flashing bits in the beam gap, and the PRBS test.

  A typical run reports 181 L1As, 702 events, 1200 corrected fast commands,
  373 dropped L1As and 5492 stalled crossings. It takes well under a minute.

To run one testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
          rtl/etroc_pkg.sv tb/tb_etl_emulator.sv --top-module tb_etl_emulator
./obj_dir/Vtb_etl_emulator
```

The package must come first on the command line. All other modules are found
through `-y`. The simulator is two-state and the testbenches reset everything
they read, so random initial values (`--x-initial unique`) are fine.

## 11. Where this design departs from the published ETROC2 emulator

- **DOR duplicates DOL.** The published capture shows the two outputs carrying
  the same event header but *different* pixel frames: rows 13 and 14 on one,
  row 5 on the other. How the chip divides an event's hits between its two
  outputs is not described, so this design sends everything on both.
- **320 Mbps only.** The chip also supports 640 Mbps and 1.28 Gbps outputs. Only
  the 8-bit-per-crossing rate is built. The bit layout at the higher rates is
  not described.
- **Filler L1A count.** A filler repeats the L1A count of the most recent
  header. In the captured stream, a filler after the event with count 0x59
  shows 0x58, so the real rule is different (for instance, it could refer to
  an earlier event). Only that field differs.
- **Chosen encodings.** These are choices of this design, not published
  values:
  - the fast-command codes;
  - the boundary-search rule;
  - the lock thresholds;
  - the trigger-bit order and block numbering;
  - the form of the flashing bit;
  - the scrambler polynomial;
  - the status bits (bit 0 = an L1A was dropped);
  - the data-frame status bits, always 0 here;
  - the overflow policy (drop the L1A when 8 events are pending);
  - the dummy-data generator.
- **Not included:**
  - the PLL (the 320 MHz clock is an input);
  - the I2C target, and the I2C controller of the DAQ side (configuration is a
    port);
  - the clock fanout chip;
  - I/O standards and pads;
  - power, supervision and flash/JTAG;
  - the analog front end (pre-amplifier, discriminator, threshold DAC, TDC),
    which is replaced by the data generator.

  In the FPGA, the memories, serializers and deserializers are vendor blocks.
  Here they are plain arrays and shift registers.
