# Trigger Data Serializer (TDS) — SystemVerilog model

The TDS sits on the front-end boards of the small-strip Thin Gap Chambers (sTGC) in the
ATLAS New Small Wheel. It takes the digital outputs of two 64-channel amplifier/discriminator
chips (ASDs) and, once per LHC bunch crossing (BC, 25 ns), sends a compact trigger record to
the off-detector trigger electronics over one 4.8 Gb/s serial link. The chip has two
personalities, chosen by a pin:

* **Pad mode** (104 inputs). Each pad fires a time-over-threshold pulse. The TDS tags every
  leading edge with the BC it belongs to, after a per-channel delay correction. Every BC it
  then sends a 116-bit packet: the BCID and one YES/NO bit per pad.
* **Strip mode** (128 inputs). Each strip sends a 6-bit charge as a serial word. The TDS
  stores the charges for a few BCs. A separate board, the pad-trigger extractor, then names a
  BCID and a band of strips. The TDS answers with a 104-bit packet: the BCID, the band, and
  the charges of 14 strips of that band.

The chip runs on one 160 MHz clock (`clk160`), four cycles per BC. The serial link carries
30 bits per `clk160` cycle, so 120 bits per BC. This RTL implements both modes, the shared
scrambler and PRBS-31 generator, the strip test modes, and a behavioural model of the
30:1 serializer.

## Time inside a bunch crossing

`bcid_counter` holds the 12-bit BCID and a 2-bit `bc_phase` (0..3, the `clk160` cycle inside
the BC). LHC BCR clears both. Every block uses `bc_phase` to place its work inside the BC,
so there is no separate 40 MHz clock.

ASD lines are sampled on both edges of `clk160`, which gives eight 3.125 ns slots per BC.
The labelling rule is the same everywhere. The sample taken at posedge *k+1*, and the one at
the negedge just before it, belong to the BCID and `bc_phase` that the counter showed during
cycle *k*.

## Pad mode

### Hit tagging and delay compensation (`pad_pulse_detect`)

A leading edge is a 0→1 step between two successive half-cycle samples. The hit gets the
BCID of its slot. Cables and boards give pads different delays, so the edges of one
particle can fall on both sides of a BC boundary. Each channel therefore has a 3-bit
`phase_shift` (0..7 slots, up to 21.875 ns). The channel's BC is treated as starting
`phase_shift` slots late: a hit in slot `s < phase_shift` is given `BCID-1`. The chip itself
regenerates a delayed BC clock per channel with dual-edge shift registers. This RTL gets the
same tags by arithmetic on the slot number.

### Ring buffer and firing status (`pad_ring_buffer`)

Each pad keeps its last two hit BCIDs in a 2-deep shift register. A timer counts BCs since
the last write. At a programmable count (`pad_timeout`; 0 turns it off) a NULL entry is
pushed, so that old hits age out. Once per BC, at the end of `bc_phase` 2, every channel
compares both entries with `BCID-2` and sets its flag. The two-BC lag leaves room for the
largest channel delay plus the pipeline, so a late hit is already stored when its BC is
judged.

### Packet (`pad_frame_builder`, `pad_tds`)

The 104 flags and the 12-bit BCID form the 116-bit packet `{bcid, flag[103:0]}`. It leaves
as four words, one per `clk160` cycle:

| word | bits 29..26 | bits 25..0 |
|---|---|---|
| 0 | header `1010`, not scrambled | packet[115:90] |
| 1..3 | packet[89:60], [59:30], [29:0], all 30 bits scrambled | |

## Strip mode

A strip trigger record is built in this order: decode → buffer → trigger → band lookup →
select → reorder → pack.

### ASD serial charge and the FLAG bit (`strip_deserializer`)

In strip mode the ASD's OUT line goes high at the peak of a strip pulse. It stays high until
the charge conversion ends, drops for half a clock, then sends the 6 charge bits (D5 first)
on both clock edges. The decoder is a four-state machine: IDLE, HIGH, DATA, then WAIT_LOW
(wait for the line to return low). It tags each word with the BCID of its leading edge and
a FLAG bit. The FLAG widens the matching window:

* `win_ext` (0..4) counts 6.25 ns steps.
* FLAG is set when the leading edge falls in the first `win_ext` `clk160` cycles of its BC.
  A flagged strip also matches a trigger for the previous BC.
* The window is thus 25 ns plus `win_ext` × 6.25 ns, up to 50 ns.

The 19-bit strip unit is `{charge[5:0], bcid[11:0], flag}`.

### Ring buffer and trigger matching (`strip_ring_buffer`)

Each strip writes its units into a 4-deep shift register (BUF0..3). A NULL timer ages
entries out, as in pad mode. When a trigger arrives, all four entries are copied into
sample registers (Reg0..3). The next cycle compares them with the trigger BCID *T*. An entry
matches if its BCID is *T*, or if its FLAG is set and its BCID is *T+1*. When several entries
match, the newest one wins. The result is a match bit and a 6-bit charge per strip.

### Pad-trigger link (`pad_trigger_if`)

The trigger request arrives on `en`, `d0` and `d1` at 640 Mb/s: a 320 MHz clock, data on
both edges. `d0` carries a 13-bit word whose upper 12 bits are the trigger BCID. `d1`
carries the 13-bit band-phi ID. Bits arrive MSB first: d12, d10, …, d0 on rising edges and
d11, …, d1 on falling edges. The complete word crosses to `clk160` through a toggle
synchronizer.

### Band lookup and strip selection — the hard part

A band is at most 17 adjacent strips, anywhere among 128. Reading it with a 17-way
selection from 128 inputs would be costly. The design instead uses three steps.

1. **LUT** (`pad_lut_tmr`). The band ID (upper 8 bits of band-phi) addresses a 256-entry
   table of `{first, last}` strip numbers. The table is stored three times and read through
   a bitwise majority vote, so one upset copy is outvoted. It is written through the
   `lut_wr_*` ports.
2. **Enable vector** (`strip_enable_encoder`). One thermometer code is 1 for strips ≥
   `first`, another is 1 for strips ≤ `last`. Their AND is the 128-bit enable vector, and
   it gates the match bits.
3. **Seventeen 8:1 selectors** (`strip_selector`). Selector *j* sees only strips
   *j*, *j*+17, *j*+34, … (inputs beyond 127 read 0). Any 17 consecutive strips hold
   exactly one strip of each residue mod 17. So each selector picks the one row *m* that
   falls in the band, and the 17 selectors together hold the whole band. The band's order
   is now rotated: selector `first mod 17` holds the first strip.

The **sequencer** (`strip_sequencer`) undoes the rotation, `out[i] = in[(first+i) mod 17]`,
in two register stages.

### 14 of 17, and the packet (`strip_frame_builder`)

Only 14 charges fit in a packet. If strip 1 of the band (the first neighbour at the top)
matched, strips 0..13 are sent; otherwise strips 3..16 are sent. A select bit records the
choice. The 104-bit payload, from bit 0 up:

| bits | content |
|---|---|
| 5:0 | trigger BCID[5:0] |
| 18:6 | band-phi ID (13 bits) |
| 19 | select bit, 1 = first 14 |
| 20 + 6k +: 6 | charge of the k-th sent strip (0 if it did not match) |

The payload leaves as four words `{header, payload[103-26k -: 26]}`, k = 0..3. The header is
`1010` for data. In a BC without a trigger, four NULL words go out instead, with header
`0110` and payload 0. In strip mode all four headers stay unscrambled.

A packet loads at the end of `bc_phase` 3, and its four words fill the following BC. A
trigger that reaches the frame builder during that load cycle is held one BC in a pending
register.

### Strip pipeline and latency

Trigger stages, in `clk160` cycles after the retimed trigger (t0):

| cycle | stage | paper's stage (Table III) |
|---|---|---|
| t1, t2 | LUT read, enable vector | find strips in ROI, 12.5 ns |
| t3, t4 | ring buffer sampled, compared | trigger matching |
| t5 | 8:1 selectors | trigger matching (18.75 ns in total) |
| t6, t7 | sequencer | strip sequencer, 12.5 ns |
| t8, t9 | group load, word register | build frame, 12.5 ns |
| t10 | scrambler | scrambler, 6.25 ns |

From the retimed trigger to the first scrambled word is 10 cycles (62.5 ns). The clock
crossing adds at most 6.25 ns, and the serializer model about 9 ns. In total that is about
78 ns, within the 100 ns requirement. The testbench checks the 10 cycles.

### Test modes (`strip_cfg.test_mode`)

* **Normal**: triggers come from the link.
* **Global test**: `asd_pattern_gen` drives ASD-like waveforms on strips 0..13. Strip *i*
  sends charge *i*, starting at BCID `pat_bcid`. At BCID `pat_bcid + trig_delay` an internal
  trigger for `pat_bcid` and band `int_bandphi` is issued. This exercises everything except
  the trigger link.
* **Bypass trigger**: every word decoded on strip `bypass_ch` is sent straight to the
  selectors as a match, with the band starting one strip lower. No trigger is needed. Ring
  buffers and LUT are skipped.
* **Frame gen**: every BC a data packet whose payload is a 13-bit counter repeated 8 times.
  Use it to train the link.

## Output link

* **Scrambler** (`scrambler`): self-synchronizing, 1 + x^39 + x^58, 30 bits per cycle,
  MSB first, registered. When `hdr` is set, bits 29..26 pass unscrambled and do not enter
  the state. The descrambler is the same recurrence applied to the received bits.
* **PRBS-31** (`prbs31`): x^31 + x^28 + 1. `prbs_en` replaces the scrambled words with it
  for link tests.
* **Serializer** (`gbt_ser`): a behavioural 30:1 model. Each `clk160` word is registered,
  loaded into a shift register halfway through the next cycle, and shifted out MSB first on
  `clk_ser` (30 × 160 MHz, phase-aligned). The real core is a mixed-signal macro. This model
  only fixes the bit order and timing.

## Top level (`tds_top`)

`mode` = 0 selects pad mode, 1 selects strip mode. The idle mode is held in reset. In pad
mode, `asd_in[103:0]` feed the pads.

* **Configuration ports** stand in for the chip's I2C registers: `pad_phase[104]`,
  `pad_timeout`, `strip_cfg` (a `tds_pkg::strip_cfg_t` struct) and `lut_wr_*`.
* **Clock ports**: `clk160`, `clk320` and `clk_ser` come from outside, standing in for the
  PLLs.
* **Outputs**: the word stream `tx_word`, the serial line `ser_out`, and the BCID,
  `pad_flags` and strip status for observation.

## Where this RTL departs from the chip, or guesses

* **Channel delay** is applied by re-labelling the hit BCID. The chip shifts a clock
  instead. The tags are identical, but timing inside a BC differs.
* **Pad latency.** Flags for BC *n* are judged during BC *n+2*, to make room for the
  largest channel shift. Measured from the end of the global BC, that is about 65 ns to the
  first serial bit. The chip's budget is 31 ns, measured from the end of a BC without
  saying which BC clock.
* **Strip unit width.** The block diagram gives the strip unit as 19 bits in one place and
  11 bits in another. 19 bits (charge, full BCID, FLAG) is used.
* **Trigger link.** The timing drawing numbers 13 `clk320` cycles, while the text says
  640 Mb/s. Both edges are used, because 13 bits at 320 Mb/s would not fit in a BC.
* **Band ID** is taken as the upper 8 bits of band-phi. The split is not specified.
* **Unspecified details were chosen**: packet bit order, pad and strip timer units (BCs),
  scrambler and PRBS seeds (all ones), the frame-gen content, the internal trigger of the
  global test, and the ASD pattern waveform (high for 4 cycles).
* **Triple modular redundancy** is built only for the band LUT. The chip triplicates all its
  logic and clock trees.
* **Not built**: the I2C block, PLL and ePLL.

## Files and simulation

`rtl/tds_pkg.sv` holds the shared sizes (104 pads, 128 strips, 12-bit BCID, 6-bit charge,
17-strip bands, 14 strips read, 30-bit words, headers) and the configuration and strip-unit
types. There is one module per file, and each file begins with a description of its timing.

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. To run one with Verilator:

```
verilator --binary --timing rtl/tds_pkg.sv $(ls rtl/*.sv | grep -v tds_pkg) \
          tb/tb_strip_tds.sv --top-module tb_strip_tds -Mdir obj && obj/Vtb_strip_tds
```

`tb/tb_tds_top.sv` runs the whole chip at full size (104 pads, 128 strips) in about 30 s.
It covers:

* pad packets with random pad sets, and the delay-compensation case (52 late channels
  split over two BCIDs, then merged by a one-step shift);
* the switch to strip mode and four triggers on the 640 Mb/s link, with 25 ns and 50 ns
  windows (FLAG matches, first- and last-14 selection, NULL frames);
* the global-test, bypass and frame-gen modes, and PRBS-31;
* a bit-exact check of the serial line.

It descrambles the word stream independently and counts each mechanism. A mechanism that
never occurs is a failure.
