# LOCic link: a low-latency frame format, encoder, serializer and decoder for calorimeter trigger data

Front-end boards of a calorimeter trigger digitize signals every LHC bunch crossing (25 ns, 40 MHz)
and have to ship the samples off the detector over optical fibers. Every nanosecond spent in the
link grows the buffers that hold the data while the trigger decides, so the link trades generality
for latency. Standard line codes such as 8b/10b or a forward-error-correcting frame need long
blocks and several pipeline stages. The design here uses a very light frame instead. For every bunch
crossing, 112 bits of ADC data (8 lanes × 14 bits) are scrambled, and 16 control bits are added:
a CRC, a fixed boundary marker, and a 4-bit slice of a pseudo-random sequence. The result is sent
as one 128-bit frame, which is 5.12 Gb/s per fiber at 87.5 % efficiency. The encoder needs about
three 640 MHz clock cycles, and the decoder needs five cycles of its 320 MHz word clock.

This repository holds synthesizable SystemVerilog for the digital part of that link, modelled on
the published LOCic/LOCx2 transmitter prototypes and their FPGA receiver:

* the two-channel transmitter: encoder plus a 16:1 serializer per channel;
* a receiver for each channel: deserializer plus decoder;
* the triple-redundant configuration register of the VCSEL driver chip (LOCld1).

The analog parts are not modelled: the PLL, the line drivers, the laser driver stages and DACs,
the optics, and the receiver's clock recovery. Their places are ports. The RTL is not a copy of
the prototypes' netlists, which were never published. The published description gives:

* the frame format;
* the block structure;
* the CRC polynomial;
* the latencies.

Everything else is this design's own choice. Each choice is pointed out below and in the
header of every source file.

## 1. The frame

A frame is 16 *slots*, one per 640 MHz clock. A slot carries one bit from each of the 8 ADC lanes.
Bit *i* of a slot belongs to lane *i*. On the serial line the slots go in order, lane 0 first, so
user bit *n* of a frame is lane `n % 8` of slot `n / 8`.

| slot | content | lanes 0-3 | lanes 4-7 |
|------|---------|-----------|-----------|
| 0-13 | user data D0-D13, scrambled | data | data |
| 14 | T0-T7: CRC-8 of the 112 unscrambled user bits (lane *i* = CRC bit *i*) | CRC[3:0] | CRC[7:4] |
| 15 | T8-T15: marker and BCID field | `1 0 1 0` (T8-T11) | PRBS field (T12-T15) |

* **CRC**: P(x) = x⁸+x⁵+x³+x²+x+1 (0x2F), register cleared at the start of each frame, bits
  folded in line order (MSB-first long division of the 112-bit message). The polynomial is the
  source design's. The initial value, bit order and placement of CRC bit *i* on lane *i* are
  choices made here.
* **Marker** `1010` on T8-T11. It bounds runs of identical bits to one frame, and it is how the
  receiver finds the frame.
* **Scrambling** keeps the line DC-balanced. A self-synchronous scrambler is used,
  s[n] = d[n] ⊕ s[n−39] ⊕ s[n−58], running over user bits only; the control slots are neither
  scrambled nor counted. A self-synchronous scrambler needs no shared reset or seed, because the
  descrambler recovers after 58 received bits. The polynomial is this design's choice: the source
  only says the data are scrambled.
* With ADCs that do not need the two calibration bits, there are 12 user slots
  (`USER_SLOTS = 12`, 85.7 % efficiency). The default is 14.

## 2. The BCID field: a counter spread over three frames

The least obvious part of the format is the 4-bit field T12-T15. The transmitter runs a 12-bit
Fibonacci LFSR:

* recurrence a[n] = a[n−1] ⊕ a[n−4] ⊕ a[n−6] ⊕ a[n−12], which is x¹²+x⁶+x⁴+x+1 with period 4095;
* seeded with all ones by the bunch-crossing reset `bc_reset`;
* advanced **four steps per frame**, with the four new bits sent as the field.

So three consecutive fields together are the complete 12-bit LFSR state, and the receiver gets a
12-bit bunch-crossing identifier (BCID) for free. The BCID is not a binary count: it is the LFSR
state, and a lookup or a second LFSR maps it to a count if needed. The state also predicts the
next field exactly. When the received field matches the prediction, that confirms the frame
boundary a second time, independently of the `1010` marker.

Conventions used by the code:

* the PRBS generator sends `state[3:0]`, the four bits it has just shifted in;
* after a frame, the receiver's BCID is `{field[n−2], field[n−1], field[n]}`;
* that value equals the transmitter's LFSR state after it built that frame's field;
* `bcid_valid` is high once three fields have arrived in a row and the newest one was predicted
  correctly.

The width of the field, its PRBS origin and the 12-bit recovered value come from the source. The
polynomial, seed and the four-steps-per-frame rule are this design's way of making them
consistent.

## 3. Transmitter (`locx2_tx`)

```
 ADC lanes (8b/word, data_clk) ─► sync_fifo ─► frame_builder ─► gearbox ─► ser_unit ─► serial
 frame_clk (40 MHz level) ──────┘   │   ▲         │  ▲  ▲        (2 slots →    16:1 tree
                                    │   │         │  │  └ prbs_gen (marker + field)
                                    │   │         │  └ crc_gen (CRC-8 of raw data)
                                    │   └─────────┴ scrambler
                                    └ LOC clock = serial clock / 8 (from ser_unit)
```

**Sync FIFO** (`sync_fifo`). ADC data arrive on a data clock at the same word rate as the
640 MHz LOC clock but with an unknown phase. A 4-entry ring buffer bridges the two:

* pointers run freely, with no full or empty logic, because both clocks come from the same
  reference;
* the read side starts one entry behind once a "writing" flag has crossed a two-flop
  synchronizer;
* each word spends 1-2 LOC cycles in the FIFO, depending on the start-up phase;
* the rising edge of the 40 MHz frame clock tags D0 as start of frame;
* the very first word after reset is not delivered.

**Frame builder** (`frame_builder`). A slot counter restarts on every start-of-frame tag. In
slots 0-13 the builder:

* outputs the scrambled word;
* pulses the scrambler and CRC enables.

In slot 14 it outputs the CRC. In slot 15 it outputs marker plus field and pulses the PRBS
enable. ADC data arriving in slots 14-15 are dropped. The output is registered, so scrambler, CRC,
PRBS and frame builder together cost one cycle, as in the source.

**Encoder latency.** From D0 written into the FIFO to D0 leaving the frame builder is at most
3 LOC cycles (4.7 ns measured). This is within the 4 cycles / 6.25 ns budget of the source.

**Gearbox and serializer.** The serializer takes 16-bit words, so the encoder's 8-bit slots are
paired: the even slot goes to the low byte and the odd slot to the high byte. The serializer
(`ser_unit`) is the four-stage 2:1 multiplexer tree of the source, 16:8 → 8:4 → 4:2 → 2:1:

* each stage is a register that takes alternately the low and high half of the stage before it,
  at half the rate of the next stage;
* all the clock dividers are one 4-bit counter *c* on the bit clock;
* each stage is phased to update one bit period after the stage before it, so nothing waits
  longer than it must:
  * 16:8 takes the low byte at *c* = 15 and the kept high byte at *c* = 7;
  * 8:4 updates at *c* = 0, 4, 8, 12;
  * 4:2 updates at odd *c*;
  * 2:1 updates every bit period;
* bit 0 leaves first, 3 bit times after the word is sampled;
* `clk_div8` is the encoder's LOC clock and `clk_div16` is the word clock.

The source derives the LOC clock from the serializer clock in the same way.

**Transmitter latency.** The time from D0 in to its first serial bit out adds up as follows:

| part | worst case |
|---|---|
| encoder | 3 LOC cycles |
| gearbox | 2 LOC cycles |
| wait for the next serializer load | up to 12 bit times |
| serializer tree | 3 bit times |
| **total** | 55 bit times = 10.74 ns at 5.12 Gb/s |

Measured over random clock phases it is 9.0-10.2 ns, within the < 10.9 ns estimated for the
LOCx2 chip.

## 4. Receiver (`deser` + `locic_decoder`)

```
 serial ─► deser ─► data_extractor ──────► descrambler ─► crc_checker ─► data, frame_flag,
          (1:16,     (2-word window,  │     (1 cycle)      (1 cycle)     frame_end, crc_flag
          rx_clk =    bit slip)       ▼
          bit/16)            sync_ctrl (marker hunt, word index) ─► bcid_gen (2 cycles) ─► bcid
```

**Deserializer** (`deser`). It collects 16 bits per word, with the first bit received in bit 0.
At 5.12 Gb/s its word clock `rx_clk` runs at 320 MHz. In the source this is an FPGA transceiver
with clock recovery. Here the recovered bit clock is an input.

**Synchronizer and data extractor** (`sync_ctrl`, `data_extractor`). These run side by side and
take 3 word clocks.

The extractor keeps the current and previous words and cuts a 16-bit window at bit offset
`offset` (0-15) out of the 32 bits. This is the bit slip.

The synchronizer looks for `1010` in bits 8-11 of the window at the position where a control
word should be. It has three states:

* **HUNT**: at the current offset it watches 8 words. If a marker appears, that word is taken as
  the end of a frame. If none does, the offset slips by one bit and the one word still cut at the
  old offset is ignored.
* **CHECK**: the marker must reappear every 8 words, `LOCK_N` = 4 times in a row. Otherwise the
  offset slips and the synchronizer returns to HUNT.
* **LOCK**: frames are delivered with their word index. `UNLOCK_N` = 4 missed markers in a row
  return it to HUNT.

The marker test and the state machine are this design's choices; the source only names the
function. Slipping costs up to 8 words per bit, so the time to lock depends on the start offset:

| situation | time to lock |
|---|---|
| first lock in the end-to-end test | a few hundred ns |
| worst case after a jump in the line delay | about 1.3 µs |

**Descrambler** (`descrambler`). It applies the inverse of the scrambler to user words only, and
passes the control word through. It takes 1 cycle. Its history is right only from the second frame
after lock. The CRC checker therefore marks the first frame after lock (and after any gap in the
valid words) as not valid, with frame_flag low, instead of reporting a CRC error.

**CRC checker** (`crc_checker`). It takes 1 cycle and recomputes the CRC over the 7 descrambled
user words.

* At the control word it raises `frame_end` and sets `crc_flag` = 1 on a mismatch.
* `frame_flag` is high on each word delivered while locked.
* At `frame_end`, `frame_flag` tells whether the frame as a whole is valid: locked, its
  marker present, and not the first frame since the valid words began.
* Data words come out before their CRC is known, so a user waits for `frame_end` before trusting
  the frame.

**BCID generator** (`bcid_gen`). It takes 2 cycles, so `bcid` and `bcid_valid` arrive together
with `frame_end` and `crc_flag`.

**Decoder latency.** Counting the edge that samples the deserialized word holding a frame's last
bit, there are 5 register stages (3 + 1 + 1), matching the source's FPGA receiver. `frame_end`
comes 4 `rx_clk` edges after that edge.

## 5. VCSEL driver configuration (`locld1_regs`)

The laser driver has a 16-bit internal register written over I²C. It sets:

* modulation current;
* bias current;
* the strength of the shunt peaking in its pre-drivers.

In this design the register is kept in three copies:

* every output is the bitwise majority of the copies;
* every cycle all three copies are rewritten with the voted value, so a single upset is outvoted
  at once and repaired at the next clock;
* `seu_seen` pulses when the copies disagreed.

Writes come one byte at a time: address 0 holds bits 7:0 and address 1 holds bits 15:8. The I²C
slave itself is not included: it is an outside design, and its byte writes are the `cfg_*` ports.

The field layout is this design's choice:

| bits | field |
|---|---|
| 4:0 | `mod_code` |
| 10:5 | `bias_code` |
| 15:11 | `peak_code` |

## 6. Top level (`loc_link_top`)

The top level connects:

* `locx2_tx`, with two channels;
* for each channel a `deser`, a `locic_decoder` and a `locld1_regs`.

Clocks:

| clock | what it is |
|---|---|
| `clk_ser` | transmit bit clock, standing in for the PLL |
| `data_clk` | ADC word clock |
| `frame_clk` | 40 MHz frame clock, given as a level in the `data_clk` domain |
| `rx_clk_ser` | receive bit clock, after clock recovery |
| `cfg_clk` | configuration clock |

`tx_serial` and `rx_serial` are where the drivers, fiber and photoreceiver would sit. All resets
are active high and synchronous, with one exception. The divided clocks stop while their divider
is in reset, so the LOC-clock domain of each transmit channel and the `rx_clk` domain of each
receiver are reset asynchronously by `rst` / `rx_rst`. They are released two of their own clock
edges later. The lint tool reports this double use of `rst` and `rx_rst` (synchronous and
asynchronous); it is intended.

## 7. Where this design departs from the source chips

* **Bit clock.** The serializer runs on a full-rate bit clock, one bit per rising edge, with
  counter-based dividers. The source uses a half-rate (2.56 GHz) clock from an LC-PLL and
  divides it by 4 to get 640 MHz.
* **ADC input.** The input is one 8-lane word per data-clock edge at the LOC word rate. The
  ADCs' own serial interface, with its double-data-rate data clock, is not modelled.
* **Gearbox.** The gearbox is added so the 8-bit encoder can feed the 16-bit serializer. It
  costs up to 2 LOC cycles; the transmitter still stays under the 10.9 ns estimate, because the
  serializer tree is phased for a 3-bit latency.
* **Unspecified parts.** The following are choices made here, stated above: scrambler, PRBS,
  CRC bit order and initial value, synchronizer state machine, BCID validity rule and
  register layout.
* **Not built.** Not built, because they are analog, optical or outside designs:
  * LC-PLL;
  * LVDS receivers;
  * CML drivers;
  * the laser driver's pre-drive and output stages and its DACs;
  * I²C slave;
  * VCSELs and optical module;
  * photodiode/TIA;
  * receiver clock recovery.

## 8. Files

| file | module |
|---|---|
| `rtl/locic_pkg.sv` | frame constants, CRC/scrambler/PRBS bit functions shared by both ends |
| `rtl/sync_fifo.sv`, `prbs_gen.sv`, `crc_gen.sv`, `scrambler.sv`, `frame_builder.sv` | encoder blocks |
| `rtl/locic_encoder.sv` | one encoder channel |
| `rtl/ser_unit.sv` | 16:1 serializer tree with dividers |
| `rtl/locx2_tx.sv` | two encoder + serializer channels with gearboxes |
| `rtl/deser.sv`, `data_extractor.sv`, `sync_ctrl.sv`, `descrambler.sv`, `crc_checker.sv`, `bcid_gen.sv` | receiver blocks |
| `rtl/locic_decoder.sv` | decoder |
| `rtl/locld1_regs.sv` | TMR configuration register |
| `rtl/loc_link_top.sv` | top level |

Parameters, all defaulting to the source's values:

| module(s) | parameter | default | meaning |
|---|---|---|---|
| `loc_link_top`, `locx2_tx` | `NCH` | 2 | channels |
| encoder and decoder modules | `USER_SLOTS` | 14 | user slots; 12 without calibration bits |
| decoder modules | `FW` | 8 | words per frame; derived from `USER_SLOTS` in the decoder |
| `sync_ctrl` | `LOCK_N` | 4 | markers in a row to lock |
| `sync_ctrl` | `UNLOCK_N` | 4 | missed markers in a row to unlock |
| `sync_fifo` | `DEPTH` | 4 | FIFO entries |
| `locld1_regs` | `RESET_VALUE` | `16'h0000` | register value after reset |

## 9. Simulation and what has been checked

Every testbench is self-checking. Each one:

* compares against reference models in `tb/tb_ref_pkg.sv`, written without reusing the RTL
  functions: CRC by polynomial long division over a bit array, scrambler and PRBS as explicit bit
  sequences, and a frame generator;
* ends by printing `TB_RESULT checks=N failures=M`.

To run one with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/locic_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_loc_link_top.sv --top-module tb_loc_link_top -o sim && obj_dir/sim
```

| testbench | checks |
|---|---|
| `tb_crc_gen`, `tb_scrambler`, `tb_prbs_gen` | against bit-serial references; PRBS period 4095, `bc_reset` |
| `tb_sync_fifo` | order, start-of-frame tags, 1-2 cycle latency over random clock phases |
| `tb_frame_builder` | slot order and kinds, enables, re-alignment; 14 and 12 user slots |
| `tb_locic_encoder` | every output slot against the reference frame; latency ≤ 4 LOC cycles |
| `tb_ser_unit`, `tb_deser` | bit order, 15-cycle serializer latency, gap-free words, divided clocks |
| `tb_locx2_tx` | both serial lines bit-exact for 150 frames; channels aligned; latency bound |
| `tb_sync_extract` | lock after slips, word indices, loss and recovery of lock after a stream shift |
| `tb_descrambler`, `tb_crc_checker`, `tb_bcid_gen` | one block each against the references, including injected errors |
| `tb_locic_decoder` | full decoder: 5-stage latency, data, CRC errors, relock, BCID |
| `tb_locld1_regs` | byte writes, readback, code fields, single upsets in each copy |
| `tb_loc_link_top` | end to end at the default size (see below) |
| `tb_loc_link_12slot` | the same end-to-end test with `USER_SLOTS = 12` (112-bit frames, 4.48 Gb/s); D0 in to `frame_end` is 51.6-54.2 ns there, because its bit period is longer (25 ns over 112 bits) |

`tb_loc_link_top` runs the default configuration end to end: two channels, 14 user slots,
5.12 Gb/s. It sends 300 frames of random data through a loop-back with a random delay, and
during the run it:

* shifts the line delay, forcing a relock;
* flips single line bits;
* pulses `bc_reset`;
* writes the driver registers and upsets one copy.

It checks every received frame byte for byte against what was sent, and checks its BCID. A CRC
error is accepted only within a few frames of a flipped bit; any other one is a failure, including
on the first frame after a lock, which the receiver must mark invalid instead. It also
prints the link latency with the fiber taken out. From D0 entering the transmitter to the frame's
`frame_end` it is 48.2-50.6 ns. That includes the 23.4 ns the rest of the frame spends on the line,
because the CRC can only be checked once the frame has arrived. From the last bit of a frame to
its `frame_end` it is about 25-27 ns. The source design estimates 57.9 ns for its whole link, but
most of that figure is its FPGA transceiver (about 30 ns), which this model replaces with an ideal
clock.

The testbench fails if any of these never happened: bit slip, lock, relock, CRC error, BCID valid, BCID restart,
register write or upset repair.

Every testbench was also run against a copy of its block with one deliberate bug, and each
reported failures.

What has not been checked:

* timing closure at 640 MHz or above (no technology library is involved);
* behaviour with a real recovered clock that wanders in phase;
* the analog blocks.
