# ART data driver card: hit-selection logic and test-platform firmware

In the Micromegas chambers of the ATLAS New Small Wheel, every VMM front-end
chip (64 strips) reports, within each 25 ns bunch crossing (BC), the 6-bit
address of the first strip that crossed threshold. This fast report is the
"Address in Real Time" (ART), and the muon trigger is built from it. The ART
data driver card (ADDC) sits on the chamber rim. It receives the ART streams
of 64 VMMs, keeps at most 8 hits per group of 32 VMMs in each BC, labels each
hit with the VMM it came from, and sends the result with the BC number (BCID)
to the trigger processor over GBT optical links. All of this must take well
under 500 ns.

This repository gives SystemVerilog for the digital part of that chain, which
is the hit-selection core of the ART ASIC (two per card). It also gives the
FPGA logic of the bench that tests a card on its own: an ART pattern
generator, a configuration path, ping-pong receive buffers and a latency
meter. The radiation-hard chips the card carries are not logic that can be
written here: the GBTx serializer, the SCA slow-control chip, the VTTx
optical transmitter and the FEAST DC-DC converter. Nor are the bench's
processor, Ethernet, DDR memory and GBT link firmware. Their signals appear
as ports.

## 1. The ART message on the wire

The VMM sends ART on one differential line, clocked by the 160 MHz ART clock
and changing on both edges. That makes 320 Mb/s, or eight half-bit "slots"
per BC. A message has three parts:

```
slot:     R  F  R  F  R  F  R  F  R  F  R  F  R  F
line:     0  1  1  0  a5 a4 a3 a2 a1 a0 0  0  0  0
          `flag´  gap `---- address ---´ `- idle -´
```

- The flag is high across two falling clock edges.
- The line is then low up to the next rising edge.
- The six address bits follow, one per edge.
- About 10 ns of idle follows, while the VMM's ART logic resets.

`R` marks a slot launched at a rising edge and `F` one launched at a falling
edge.

`art_iddr` captures the line with a falling-edge and a rising-edge flop. It
presents two slots per 160 MHz cycle as `{R, F}`. `art_deser` passes each
slot through a five-state machine:

- IDLE to FLAG1 on the first high slot.
- FLAG1 to FLAG on the second high slot. A single high slot returns to IDLE.
- FLAG to GAP on the first low slot.
- GAP to DATA at the next R slot.
- DATA lasts six slots.

Because the address always starts on an R slot, the decoder accepts both
flag placements: `F R` followed by `F` low, or `R F` followed by a whole low
cycle. It needs no per-input phase setting. This design takes bit `fa0`
(the first sent) as the address MSB. An optional XOR at the input inverts
the line polarity of any input.

## 2. From 32 streams to one word per bunch crossing

Everything in `art_asic` runs on the 160 MHz clock. A 2-bit counter, cleared
by reset, marks the BC phase p = 0..3. Hits move through the pipeline once
per BC:

| stage | module | happens at the end of | what it does |
|---|---|---|---|
| decode | `art_deser` x32 | any cycle | one-cycle `hit_valid` with the address |
| align | `art_bc_align` | p = 3 | keeps the first hit of this BC per input, applies the dead time, releases all 32 |
| BCID | `bcid_counter` | p = 3 | counts BCs; BCR makes the next BC number 0; wraps after 3563 |
| select | `art_hit_select` | p = 0 | 8 cascaded priority encoders; registers hits, map and BCID |
| format | `widebus_formatter` | combinational | builds the 112-bit word for the current mode |
| serialize | `elink_serializer` | p = 1 | loads 8 bits per e-link; sends 2 bits per cycle |
| output | `elink_oddr` x14 | both edges | DDR output, 320 Mb/s per e-link |

Phase alignment works as follows. A hit belongs to the BC in which its
decoder finished, so a hit decoded at p = 3 still makes it into that BC. An
ART message takes about seven cycles, so no input can produce two hits in
one BC. A second hit on the same input in one window is dropped.

The dead time works per input. After an input releases a hit in BC *b*, it
ignores new hits through BC *b + deadtime*. The dead time is counted in BCs,
with 4 bits.

The cascaded priority encoders work as follows. Encoder *k* takes the hit
flags left over by encoders 0..*k*-1 and finds the lowest-numbered input
still set. Its output is that input's index, used as the 5-bit VMM address,
together with the input's strip address. Encoder *k* then clears that flag.
With more than 8 hits in a BC, the 8 lowest-numbered inputs win and the
rest are lost. The chain is combinational. It has the whole BC (four
cycles) to settle, but the RTL registers it after one cycle, at p = 0. A
timing-critical implementation could spread it over the BC.

Each input also has an "inverted channel number" bit. When set, that input
reports its strip address as 63 minus the address, for front-end boards
that are mounted mirrored.

Latency: in simulation, the last bit of the word reaches the receiver 15
cycles (94 ns) after the first slot of an ART message. This time includes
the message itself (5 cycles), the capture, the wait for the end of the BC,
selection, serialization and the eight-bit e-link frame. The card-level
bench measurement in `tb_addc_test_system` gives 16 cycles (100 ns) from
the generator's start flag to the first received word carrying a hit. The
real ART ASIC was measured at about 44 ns, so this RTL is not tuned to that
figure. It is still far inside the 500 ns budget, including the roughly
143 ns of GBTx plus optical transmitter measured for the real card.

## 3. The wide-bus word

A GBTx in wide-bus mode accepts 14 e-links of 320 Mb/s from the ART ASIC,
that is 14 x 8 = 112 bits per BC. E-link *k* carries word bits
[8k+7 : 8k], most significant bit first. The layout within the word is this
design's own choice, defined in `addc_pkg`:

| bits | hit-list mode | hit-map mode | pattern mode |
|---|---|---|---|
| 111:100 | BCID | BCID | `pattern` on every e-link |
| 99:92 | hit valid, bit 92+k for hit k | hit map 99:68, bit 68+i for input i | |
| 91:4 | hit k at [91-11k -: 11] = {VMM[4:0], strip[5:0]} | zero (67:0) | |
| 3:0 | zero | | |

A word whose bits 99:0 are all zero is a BC without hits.

## 4. Configuration and modes

`art_cfg_t` holds one ART ASIC's static configuration. On the card it is
written by the SCA over I2C. The register file behind that interface is not
specified, so here the configuration is a struct port. It has five fields:

- `mode`:
  - `MODE_HITLIST`: the normal data.
  - `MODE_HITMAP`: which of the 32 VMMs fired.
  - `MODE_PATTERN`: a fixed byte on all e-links. After power-up the receiving
    GBTx finds the e-link byte boundary on it (see `tb_elink_rx`).
- `invert_pol[31:0]`: line polarity per input.
- `invert_chan[31:0]`: report 63 - strip, per input.
- `deadtime[3:0]`: in BCs.
- `pattern[7:0]`: the alignment byte.

Changing `invert_pol` while lines are active produces spurious decodes for a
few cycles. Reconfigure, then wait a few BCs.

## 5. The test platform

`addc_test_system` is the top level. It contains the card (`addc`, two
`art_asic`) and the FPGA side of the bench around it:

- **`art_gen`**: the ART data generator.
  - Software loads up to 256 entries of {BCID, channel 0..63, 6-bit address},
    sorted by BCID, and starts it.
  - It keeps its own BC counter. The run starts in BC 3563 and holds BCR high
    during every BC 3563, so the card's BCID follows the generator's with a
    fixed offset (2 BCs in simulation).
  - Entries are read one per cycle. Entries sharing a BCID arm their
    channels, and all armed channels start their messages together when that
    BC begins (`art_tx_chan` + `elink_oddr` per line).
  - `start_flag` pulses at each such start. A group of N entries needs about
    N/4 BCs of lead time after the previous group.
- **`sca_ec_packer`**: the configuration path toward the card's SCA.
  - Software supplies bytes that are already HDLC-framed. The packer sends
    them two bits per BC in the GBT frame's EC field, and sends HDLC flags
    (0x7E) when idle.
- **`pingpong_buf`** (one per optical link): two banks of 256 words.
  - The writer fills one bank while the reader (the DMA) empties the other.
  - A bank is handed over when full, or on `flush`.
  - If the writer finds no free bank, words are dropped and counted in
    `overflow_cnt`.
  - On the bench the banks live in DDR memory. Here they are arrays.
- **`latency_meter`**: counts cycles from the first `start_flag` after
  `arm` to the stop flag. The stop flag is the first received word on link 0
  whose hit field is non-zero.

The path from the card's e-links back to `rx_valid`/`rx_frame` is not logic
in this repository. It runs through the GBTx, the VTTx, fibre, an SFP and a
GBT-FPGA receiver. In the testbenches, `tb_elink_rx` closes it: it samples
the 14 lines on both edges, locks to the pattern byte, and then delivers
one word per BC.

## 6. What follows the published design and what is this design's own

These parts follow the published description of the card:

- 32 ART inputs per ASIC and two ASICs per card.
- The ART signal format.
- Deserialization and alignment to the BC.
- Up to 8 hits found by cascaded priority encoders.
- The 5-bit VMM address appended to each hit.
- The 12-bit BCID with BCR.
- GBT wide-bus output on 14 e-links at 320 Mb/s.
- The static-pattern mode for output phase alignment.
- The features named by the card's test sequence: dead time, input
  polarity, inverted channel number, BCR, hit-map mode and hit-list mode.
- On the bench: an ART generator fed by {BCID, channel, address}, an
  HDLC-to-GBT configuration module, ping-pong buffering and start/stop
  latency flags.

These are this design's own choices:

- The word layout.
- Lowest-input-first priority.
- The input index as the VMM address.
- The reading of "inverted channel number" as 63 - strip.
- The dead-time unit and width.
- MSB-first ART bits.
- The single-clock pipeline with a phase counter instead of a separate
  40 MHz clock.
- The configuration as a struct.
- The orbit wrap at 3563.
- The generator's table and BCR scheme.
- The EC-field packing.
- The buffer hand-over rules.
- The stop-flag rule.

Both ART ASICs share one clock here. On the card each gets its clocks from
its own GBTx.

Known departures from the published card and bench:

- Latency. The real ART ASIC needs about 44 ns from its input to the start of
  its output, measured with a probe on one output e-link. In this RTL the
  first output bit of a hit's word leaves several cycles later, and the last
  bit leaves after 94 ns. The main reasons are waiting for the end of the BC
  and the one-BC e-link frame.
- The 40 MHz BC clock is not an input. The BC is derived from the 160 MHz
  clock by a counter, so the phase relation to an external 40 MHz clock is
  set only by reset.
- The bench's option to bypass its GBTx and send configuration straight to the
  card is not modelled. Only the EC-field path exists.
- The bench's checking of received words against the sent table is software
  on the real bench. Here it is done by the testbench.

## 7. Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/addc_pkg.sv tb/tb_addc_test_system.sv --top-module tb_addc_test_system
./obj_dir/Vtb_addc_test_system
```

Replace the testbench name to run another one. The testbenches are:

- `tb_art_iddr`, `tb_art_deser`, `tb_art_bc_align`, `tb_art_hit_select`,
  `tb_bcid_counter`, `tb_widebus_formatter`, `tb_elink_serializer` and
  `tb_elink_oddr` test the ASIC's parts.
- `tb_art_asic` tests one ASIC with a behavioural VMM source (`tb_art_src`)
  and e-link receiver (`tb_elink_rx`), through every mode.
- `tb_addc` tests the two-ASIC card.
- `tb_art_gen`, `tb_sca_ec_packer`, `tb_pingpong_buf` and `tb_latency_meter`
  test the bench blocks.
- `tb_addc_test_system` runs the whole bench flow at the default sizes:
  1. Configuration bytes.
  2. E-link alignment.
  3. 240 generator entries.
  4. Hit-list and hit-map words checked against the table.
  5. Bank hand-over and flush.
  6. Overflow.
  7. Latency.

  It counts each of these mechanisms and fails if one never occurred.

All of them run in well under a second. The Verilator simulator is
two-state, so every register that is read is reset.
