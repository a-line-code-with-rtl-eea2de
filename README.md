# LOCic: a low-latency line code with one-frame resynchronisation

Detector front ends at the LHC send their ADC samples over optical links. On
these links, latency counts, the transmitter sits in a radiation field, and a
receiver that loses its place in the bit stream has to find it again fast.
Standard line codes fall short on these points. 8B/10B needs large tables in
the radiation-hard ASIC. 64B/66B-style framing needs many frames to lock
again.

LOCic avoids re-formatting the data. Each 25 ns bunch crossing carries eight
ADC channels, each sending 16 bits. Fourteen of those bits are data, scrambled
for DC balance. The last two bits of every channel together form a 16-bit
control code that is **not** scrambled. The control code contains:

* a CRC of the frame's data,
* a fixed frame-boundary pattern,
* two bits from each of two short pseudo-random sequences.

The receiver finds the boundary pattern and checks it against the predicted
PRBS bits. It can then tell exactly where each frame starts, which bunch
crossing the frame belongs to (the BCID), and whether the data arrived intact.
After a one-bit slip of the serial clock, the receiver is back in lock one
frame later.

This repository holds synthesizable SystemVerilog for both ends:

* the encoder, which runs at 640 MHz on 8-bit words feeding an 8:1 serializer;
* the decoder, which runs at 320 MHz on the 16-bit words of a deserializer.

Each has its own self-checking testbench, and an end-to-end test covers the
whole link.

## The frame

One frame is 128 bits: 16 bit-times × 8 channels. In each bit-time, the eight
channels go out in order C0, C1, …, C7, so a word of 8 bits (bit *c* =
channel *c*) is one bit-time of all channels.

| bit-time per channel | content                                                    | scrambled |
|----------------------|------------------------------------------------------------|-----------|
| 0 – 11               | D0…D11, the ADC sample                                     | yes       |
| 12 – 13              | D12, D13, calibration bits (zero when the ADC has none)    | yes       |
| 14                   | T0…T7 across the 8 channels: CRC-8 of the raw data          | no        |
| 15                   | T8…T15 across the 8 channels: boundary and PRBS field       | no        |

The 16-bit control code T0…T15 is therefore spread over the last two words.

* **T0…T7: CRC-8.** The CRC covers the 112 data bits *before* scrambling,
  using P(x) = x⁸+x⁵+x³+x²+x+1. The register starts at zero in every frame.
  The bits go in in transmission order, and T0 carries CRC bit 7.
* **T8…T11: boundary.** Always `1 0 1 0`.
* **T12 T13.** Two bits per frame of a 2⁵−1 PRBS (s[n] = s[n−5] ⊕ s[n−3])
  that starts `11 00 01 10 11 10 10 10 …`.
* **T14 T15.** Two bits per frame of a 2⁷−1 PRBS (s[n] = s[n−7] ⊕ s[n−6])
  that starts `11 00 00 00 10 …`.

The two sequences repeat every 31 and 127 frames, so the PRBS field alone
would repeat every 3937 frames. Both are restarted at frame 0 after frame 3563,
so the field repeats exactly with the LHC orbit of 3564 bunch crossings.

**Scrambling.** The scrambler is the self-synchronous x⁵⁸+x³⁹+1 scrambler of
10 Gigabit Ethernet. It is applied to the data bits in transmission order.
Control bits pass around it and do not advance its state. Its seed must be
non-zero: with a zero state, all-zero data would go out as a long run of
zeros.

## Encoder (`locic_encoder`, 640 MHz)

```
 ADC words ─▶ sync FIFO ──┬─▶ scrambler ───────────┐
 (240 MHz DDR)(+4 slots)    ├─▶ CRC generator ───────┼─▶ frame builder ─▶ 8 bits/640 MHz
                          │   PRBS generator ──────┘        ▲
                          └─ frame start ─────────────── slot counter, enables
                              seed registers (×3, voted) ─▶ scrambler seed
```

The encoder takes its input in one of two modes, selected by the static
`asic_mode_i`:

* **Front-end ADC (`asic_mode_i` = 1).**
  * The radiation-hard ADC already sends 16 bits per channel and frame at
    640 Mb/s: D0…D11, calibration bits D12/D13, and two dummy bits.
  * Its words enter on `asic_data_i`, already captured into 8-bit words in the
    640 MHz domain. Word 0 arrives with the rising edge of the frame clock.
  * The FIFO is bypassed. D12/D13 are scrambled and covered by the CRC like
    the other data bits, and the two dummy words are replaced by the control
    code.
* **COTS ADC (`asic_mode_i` = 0).** A commercial ADC sends only 12 bits per
  channel at 480 Mb/s, so its data go through the sync FIFO.

* **`locic_sync_fifo`**
  * A COTS ADC delivers 12 bits per channel and frame: 12 words at 480 Mb/s,
    one on each edge of a 240 MHz data clock. The write side captures a
    rising-edge word and the following falling-edge word and stores them as
    one pair.
  * The FIFO moves these words into the 640 MHz domain through Gray-coded
    pointers.
  * It emits frames of 16 slots: the 12 words, then 4 zero slots. The zero
    slots become D12, D13 and the two control words.
  * The rising edge of the 40 MHz frame clock marks word 0, and this flag
    travels with the data.
  * A frame is started only when a start-of-frame word is at the head and
    `START_LEVEL` (6) words are stored. This is needed because 12 words are
    read at 640 MHz while they are written at 480 Mb/s. Word 10 is the
    tightest case: it is read 15.6 ns after the burst starts, but its pair
    is written 25 ns after word 0 arrives.
  * A lost frame start raises `err_o`, and the FIFO realigns.
* **`locic_frame_builder`**
  * Counts the 16 slots from the frame start.
  * Drives the enables: scrambler and CRC in slots 0–13, CRC clear and
    PRBS advance in slot 0.
  * Registers the outgoing word: scrambled data, then T0…T7, then T8…T15.
* **`locic_scrambler`** scrambles 8 bits per cycle with a combinational
  unrolling of the bit-serial recurrence.
* **`locic_crc_gen`** updates the CRC 8 bits per cycle.
* **`locic_prbs_gen`**
  * Advances both PRBS by two bits per frame.
  * Counts the frame number (0…3563) and restarts both sequences at frame 0.
  * `bcid_reset_i` forces the next frame to be frame 0, which aligns the
    encoder with the orbit.
* **`locic_seed_regs`**
  * Holds the 58-bit seed in three copies, read through a bitwise majority
    vote.
  * Writes the voted value back every cycle, so a single upset is repaired
    one cycle later.
  * `mismatch_o` reports disagreement between the copies.
  * The copies carry a `keep` attribute, because a synthesis flow would
    otherwise merge them.

**Latency.** A word leaves the FIFO and appears on `tx_data_o` two clock
cycles later (3.1 ns): one cycle in the scrambler/CRC stage and one in the
frame builder. In front-end ADC mode, an input register adds one more cycle,
so a word on `asic_data_i` reaches `tx_data_o` after three cycles.

## Decoder (`locic_decoder`, 320 MHz)

```
 16 bits ─▶ data extractor ─▶ descrambler ─▶ CRC checker ─▶ data, CRC flag, frame flag
 (any bit     │   ▲ pointer
  phase)      ▼   │
            synchronizer ─▶ BCID generator ─▶ 12-bit BCID
```

The deserializer delivers 16-bit words (bit 0 received first) at an arbitrary
bit phase with respect to the frames.

### Data extractor

* **Window and pointer.** `locic_data_extractor` keeps a 48-bit window of the
  last three words. It also runs a free word counter modulo 8, since a frame
  is 8 words.
* **Boundary pointer.** The synchronizer owns a 7-bit boundary pointer (0…127).
  It names the bit at which a frame's control word begins:
  * bits 6:4 give the word phase;
  * bits 3:0 give the bit offset.
* **Once per frame**, the extractor hands the synchronizer three candidate
  control words at the same time: one bit early, at the pointer, and one bit
  late. Having all three at once is what makes one-frame resynchronisation
  possible.
* **Every cycle**, the extractor outputs the 16 bits at the pointer with
  their index in the frame. Indexes 0–6 are data and index 7 is the control
  word.

### Synchronizer

This is the part that needs the most care. `locic_synchronizer` keeps the
last 8 bits of each PRBS as received. From them it predicts the next frame's
two PRBS pairs by the recurrences.

* **CHECK.**
  * At the current pointer, wait for four consecutive frames with `1010` in
    T8…T11.
  * Then check that the eight PRBS5 and eight PRBS7 bits collected obey their
    recurrences, and go to SYNC.
  * On any failure, move the pointer one bit and start over. A full search
    covers 128 positions.
* **SYNC.**
  * Compare every control word with `1010` plus the predicted PRBS field.
  * On a mismatch, go to RESYNC. The missing frame is counted with its
    predicted bits, so the BCID keeps running.
* **RESYNC.**
  * On the next frame, test the prediction at the same pointer, one bit
    earlier, and one bit later, in that order.
  * The first that matches returns to SYNC, with the pointer moved if needed.
    After a one-bit slip the decoder is therefore back in lock within one
    frame.
  * If none matches, go back to CHECK.

**Aliasing.** `1010` has period 2. Suppose the true boundary moved one bit
late. The candidate one bit *early* is then two bits from the truth, and it
can show `1010` too. If its PRBS bits also happen to agree, it matches as
well. For that reason, when the early and the late candidate both match, the
decision is put off by one frame and the one that still matches is kept.

**Orbit wrap.** At the 3564-frame wrap, the PRBS field jumps back to its
frame-0 value, `1111`. The recurrences cannot predict this jump. So in SYNC
and RESYNC, a control word of `1010 1111` is also accepted as frame 0, and
the PRBS history is reloaded with that of frame 0.

**Hold-off.** After a control-word slot has been handled, further slots are
ignored for 6 cycles. A pointer change can move the slot by one word, and
without the hold-off the same control word could be examined twice.

### BCID generator

The frame number can only be read from four consecutive PRBS fields, and the
full map from these bits to 0…3563 would need a large table.
`locic_bcid_gen` decodes only a subset:

1. The PRBS5 bits of four consecutive frames form one byte. This byte takes
   the same value every 31 frames.
2. The PRBS7 byte takes 8 distinct values on the frames 0, 496, 992, …, 3472
   (496 = 16 × 31), which all share the same PRBS5 byte.
3. An 8-entry table of PRBS7 bytes therefore identifies those frames. The
   table is computed at elaboration from the PRBS functions of `locic_pkg`.

The bytes are taken over the four frames that end with the current one. A hit
on the key of frame 496·k therefore sets the current BCID to 496·k + 3.
Between hits the BCID counts up by one per frame and wraps at 3564. The
frame-0 rule above sets it to 0.

`bcid_o` reads `0xFFF` (invalid) outside SYNC and until the first hit. The
first hit can take up to 495 + 3 frames after the first lock. After a
resynchronisation, the count simply continues, so the BCID is valid again one
frame later.

### Descrambler and CRC checker

* **`locic_descrambler`**
  * Descrambles 16 bits per cycle using the received bits as its state.
  * The control word (index 7) bypasses it.
  * Being self-synchronous, it produces correct data again 58 bits after any
    disturbance, without knowing the seed.
* **`locic_crc_checker`**
  * Recomputes the CRC over the seven data words of each frame and compares
    it with T0…T7 when the control word arrives.
  * `crc_flag_o` holds the result for the last frame; `crc_strobe_o` pulses
    when it is updated.
  * A frame that did not have exactly seven data words fails. This can happen
    right after a pointer move.
  * `frame_flag_o` is high while the decoder is in SYNC.

One line-bit error becomes three errors after the descrambler, at distances
0, 39 and 58. The CRC detects these three errors. Long bursts, such as those
from a slip, may pass the 8-bit CRC.

**Latency.** From `rx_data_i` to `data_o` takes five cycles at 320 MHz
(15.6 ns): 3 in the extractor, 1 in the descrambler, 1 in the CRC checker.

## Top level (`locic_link`)

`locic_link` contains the encoder and the decoder of one link. The serializer,
optics, fibre and deserializer lie between the two, so they appear as ports:

* `tx_data_o`/`tx_frame_o` go to the serializer (640 MHz, 8 bits);
* `rx_data_i` comes from the deserializer (320 MHz, 16 bits).

The two halves share only the reset, and each runs on its own clocks.

## Where this design departs from, or adds to, the published description

* **Scrambler degree.** The description prints the scrambler polynomial as
  x⁵⁹+x³⁹+1. It also calls it the 10 Gigabit Ethernet scrambler with a
  58-degree polynomial. x⁵⁸+x³⁹+1 is used here.
* **BCID subset.** The listed BCIDs include 1489. Only multiples of 496
  share the PRBS5 byte, so 1488 is used.
* **COTS input rate.** One passage pads the COTS ADC's 12 bits to 14 bits at
  560 Mb/s. Another pads them to 16 bits at 640 Mb/s. The 640 Mb/s version
  is built (12 data words + 4 zero slots).
* **FIFO latency.** The FIFO must store six words before a frame can be read
  in one burst at 640 MHz. Its latency is therefore about 19 ns (measured
  from word 0 on the ADC bus to word 0 at the FIFO output),
  rather than the 1.6–3.1 ns quoted for the ASIC. The pipeline after the FIFO
  matches the quoted stages.
* **Front-end ADC capture is outside this design.** In front-end ADC mode,
  the capture of the ADC's double-data-rate output (320 MHz data clock) into
  640 MHz words is left outside the encoder, and so is the choice of mode.
* **Extra RESYNC frame.** The published state diagram has no transition
  from RESYNC back to itself. The alias tie-break adds one: the decoder
  stays in RESYNC for a single extra frame.
* **Choices of this design.** The description leaves the following open:
  * the CRC bit order and start value;
  * the direction of the CHECK pointer shift;
  * the candidate order in RESYNC;
  * the alias tie-break, the frame-0 rule and the hold-off;
  * the +3 BCID convention and the invalid value 0xFFF;
  * the external BCID reset;
  * the seed register's write port, scrubbing and all-ones reset value;
  * the frame-word-count check in the CRC checker;
  * the FIFO structure;
  * asynchronous active-low reset everywhere.
* **No SEU hardening** is applied to counters and state machines. They
  recover within a frame, as intended for the radiation-tolerant encoder.
  Only the seed is triplicated.

## Files

| file | contents |
|------|----------|
| `rtl/locic_pkg.sv` | constants, `sync_state_e`, `prbs_field_t`, PRBS/CRC/scrambler functions |
| `rtl/locic_sync_fifo.sv` … `rtl/locic_encoder.sv` | encoder blocks and encoder top |
| `rtl/locic_data_extractor.sv` … `rtl/locic_decoder.sv` | decoder blocks and decoder top |
| `rtl/locic_link.sv` | top level |
| `tb/tb_locic_ref_pkg.sv` | bit-serial reference model (PRBS, CRC by long division, scrambler) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_locic_encoder_asic.sv`, `tb/tb_locic_link_asic.sv` | encoder and link in front-end ADC mode |
| `tb/tb_locic_decoder_biterr.sv` | single-bit line errors against the CRC |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a run that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/locic_pkg.sv tb/tb_locic_ref_pkg.sv tb/tb_locic_link.sv \
  --top-module tb_locic_link -o sim
./obj_dir/sim
```

Replace `tb_locic_link` with any other testbench name to run it instead.

**End-to-end test.** `tb_locic_link` runs the top with all parameters at
their defaults:

* 3900 frames of random ADC data at 480 Mb/s (240 MHz DDR) into the encoder;
* a behavioural 8:1 serializer / 1:16 deserializer in the testbench;
* injected line events: one-bit slips each way, 80-bit error bursts followed
  by a slip, and one large jump that loses lock;
* an encoder BCID reset.

Every frame the decoder outputs as valid with a good CRC must equal the ADC
frame sent, in order, with the BCID the encoder gave it. Frames away from
injected events must never be lost. The test also counts each mechanism and
fails if any never happens: FIFO start, orbit wraps on both sides, BCID
reset, all-zero frames, lock and relock, one-frame resync (early and late),
loss of lock with return through CHECK, and CRC failures.

**Front-end ADC mode.** Two further tests cover this mode:

* `tb_locic_encoder_asic` checks the encoder bit-exactly against the
  reference model, including the 3-cycle latency.
* `tb_locic_link_asic` runs the whole link over an orbit wrap. It checks
  in-order frames with calibration bits, good CRCs and correct BCIDs.

**Bit errors.** `tb_locic_decoder_biterr` inverts one data bit on the
line in every fourth frame. After the descrambler this gives three errors,
which may fall into two frames. The test checks three things:

* every frame that receives one, two or three of these errors is flagged by
  the CRC;
* every other frame arrives intact;
* the decoder never leaves SYNC.

**Block tests.** The block testbenches check bit-exact outputs against the
reference model. They also check the cycle latencies given above:

* 2 cycles in the encoder;
* 3 cycles in the data extractor, then 1 each in the descrambler and the CRC
  checker;
* the worst-case 498-frame search for the first BCID.
