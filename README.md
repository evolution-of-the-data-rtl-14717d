# Simple data concentration for the CBM STS readout

The silicon tracking system (STS) of the CBM experiment runs without a trigger:
its front-end ASICs stream 24-bit words (hits with a short timestamp, and epoch
markers carrying the upper timestamp bits) over tens of thousands of 320 Mb/s
e-links. A readout board in the service building receives them through GBT
links, 14 e-links per link, and has to hand them to a PCIe DMA engine that
writes wide words (256, 512 or 1024 bits) into the memory of a computer.

This RTL does that aggregation in the "simple concentration" style: it does not
sort, filter or reformat the data. Every e-link word is passed on unchanged,
only tagged with where it came from, and packed densely into 512-bit records in
the order in which it arrived. The stream is cut into microslices by the local
time of arrival, not by the timestamps inside the data, so corrupted data can
never confuse the aggregation, and software can rebuild each e-link's original
stream bit for bit. The only words the hardware adds are artificial epoch
markers for e-links that have been silent for a long time, and filler words
that close a record at a microslice boundary.

The core of the design is a concentrator that takes up to 16 words per clock,
from any subset of its 16 inputs, and writes them into consecutive slots of the
output record with no holes and without ever stalling. It does this with a
4-layer baseline network of 2x2 switches, not with a 16-way crossbar or a
multiplexer tree.

## Data path

```
 e-links (decoded 24-bit words), 16 groups x 15
   |
   | epoch_inserter (one per e-link): artificial TS-MSB marker after 256 idle clocks
   v
 elink_group_serializer (one per group): 15 e-links -> 1 word/clock,
   |                                      + source ID -> 32-bit DAQ word, DAQ flag
   v  16 x (flag, 32-bit word) per clock
 data_concentrator
   |  concentrator_controller -> switch settings, write strobes, output strobe
   |  baseline_network (4 layers, 32 switches) -> bit-reverse wiring
   |  aux_record (16 words)  -> output_record (16 words = 512 bits)
   v  record + end-of-microslice flag
 output_fifo (256 records)
   v
 microslice_generator  <- local_ts_counter <- TFC
   v  512-bit records, one descriptor after each microslice
 out_valid / out_ready / out_data / out_desc   (to the PCIe output module)
```

Everything runs on one 160 MHz clock with an active-low synchronous reset.
The top level is `sts_concentrator_top`.

## DAQ words and e-link groups

A front-end e-link sends at most one word per 93.75 ns (30 line bits at
320 Mb/s). At 160 MHz that is one word every 15 clocks, so 15 e-links fit
exactly into one word per clock. `elink_group_serializer` serves the e-links of
one GBT link round-robin, one slot per clock, and emits at most one word per
clock together with a DAQ-word flag.

Each word gets an 8-bit source ID, making the 32-bit DAQ word:

| bits   | field |
|--------|-------|
| 31..28 | GBT-link number (`link_id` input of the group) |
| 27..24 | e-link number within the group, 0..14 |
| 23..0  | the e-link word, unchanged |

E-link number 15 is never used by an e-link and marks the filler word
`32'hFF00_0000`.

Each e-link has a two-word buffer. One word is enough for an e-link that keeps
to its rate, since its slot comes round every 15 clocks. The second word is
there because an artificial epoch marker can be followed one clock later by a
real word. An e-link that sends faster than that loses words and sets its
sticky bit in `elink_overrun`.

## Artificial epoch markers

Hit words carry only the low 10 bits of the 14-bit front-end timestamp (unit
3.125 ns). The upper bits come from epoch (TS-MSB) markers. If an e-link has no
hits for a long time, software would lose track of its time. So
`epoch_inserter` counts idle clocks per e-link. After 256 idle clocks (1.6 us)
it emits a marker made from bits 13..8 of the local timestamp, and it starts
counting again. A real word always has priority and restarts the count.

Marker layout: `{2'b01, ts[13:8], ts[13:8], ts[13:8], crc4}`, where the CRC-4
(polynomial x^4+x+1, MSB first, initial value 0) covers the 20 bits in front of
it. The three copies of bits 13..8 and the 4-bit CRC are the front-end format.
The header bits and the polynomial are assumptions of this design, since the
front-end protocol specification is not reproduced here. They are defined in
one place (`sts_conc_pkg::make_epoch_marker`).

## Packing without gaps: the baseline-network concentrator

This part does the real work of the design, and it is the least obvious part.

### Slot assignment

Let M = 2^N = 16, and let `fill` be the number of words already waiting in the
partially filled record. In each clock the DAQ words are numbered in input
order. A word with r DAQ words on lower-numbered inputs gets

    slot = (fill + r) mod M

If fill + r < M, the word completes the current record. Otherwise it starts the
next one, and we say it wraps. The words therefore occupy consecutive slots,
modulo M, in the order of arrival time first and input number second.

### Why a baseline network can route this

A baseline network with N layers is built recursively. A first layer of M/2 2x2
switches joins inputs 2s and 2s+1. Each switch sends one output to input s of
an upper (N-1)-layer network and the other to input s of a lower one. The upper
network drives outputs 0..M/2-1 and the lower one the rest.

The controller routes each word by destination tag, using the slot number with
its **least** significant bit first. At layer 0, bit 0 of the slot picks the
upper (0) or lower (1) half. At layer 1, bit 1 picks within that half, and so
on. A word with slot k therefore leaves the network at output bitrev(k), and a
fixed bit-reversing wiring after the network turns that back into slot k.

No two words ever want the same switch output:

* Two DAQ words that meet at a first-layer switch sit on adjacent inputs, so
  their slots are consecutive and their bit 0 differs.
* The words that reach the upper sub-network are the even-slot words, still in
  input order. Their slots divided by 2 are again consecutive modulo M/2. The
  same holds for the odd-slot words in the lower sub-network.
* The argument therefore repeats at every layer.

Non-DAQ inputs carry don't-care data. A switch is set by its upper input if
that carries a DAQ word, otherwise by its lower input, otherwise straight. The
controller includes an assertion that no two words share a slot. Its
testbench also routes the input numbers through a model of the network and
checks the destination of every word.

Example, N = 4, fill = 14, DAQ words on inputs 1, 2 and 9:

| input | r | fill + r | slot | wraps | network output bitrev(slot) |
|-------|---|----------|------|-------|-----------------------------|
| 1     | 0 | 14       | 14   | no    | 7  |
| 2     | 1 | 15       | 15   | no    | 15 |
| 9     | 2 | 16       | 0    | yes   | 0  |

The record is now complete. The output record takes slots 0..13 from the aux
record and slots 14 and 15 from the network. The word from input 9 goes into
slot 0 of the aux record, and `fill` becomes 1.

### The two records

Both records are registers of M words, and each word has its own write control:

* **aux record** (`aux_record`) holds the words of the record being filled. If
  the words of a clock do not complete the record, all of them are written
  there. If they do, only the wrapping words are written there.
* **output record** (`output_record`) is loaded in a single clock when a record
  is complete. Each slot is loaded from one of three sources:
  * the aux record, for slots below `fill`;
  * the network, for the words of this clock that complete the record;
  * the filler word, for slots left empty (only when a record is closed early).

  The output strobe (`rec_valid`) follows one clock after the load.

Any pattern of DAQ-word flags is accepted every clock. At full input (16 words
per clock) one complete record leaves every clock. The datapath from the inputs
to the record registers is a single combinational stage: prefix count, 4
switch layers and the record multiplexers.

### Closing a record early

At a microslice boundary (`flush`), the current record is written out even if
it is not full. Its empty slots are filled with filler words, and it carries
the end-of-microslice flag. Words of the flush clock that fit are included.
If the words of that clock fill the record anyway, it is closed normally, and
the wrapping words open the next microslice.

## Microslices by arrival time

`local_ts_counter` counts the local time in 3.125 ns units, adding 2 per clock.
A TFC load strobe sets it to a given value. Microslice n covers the local times
[n * 2^15, (n+1) * 2^15), which is 102.4 us or 16384 clocks.

`microslice_generator` has two sides:

* **Write side.** When the microslice number of the local time changes, it
  pulses `flush` for one clock. It also queues the number of the microslice
  just closed.
* **Read side.** It forwards records from the output FIFO to the output port.
  After the record carrying the end flag, it inserts one descriptor word
  (`out_desc = 1`).

Descriptor layout, from the low bits:

| bits     | field |
|----------|-------|
| 63..0    | microslice number (local time >> 15) |
| 95..64   | records in the microslice |
| 127..96  | DAQ words in them (slots not holding a filler word) |
| 159..128 | records dropped by the output FIFO since the previous descriptor |
| 191..160 | `32'h4D53_4C43` |
| 511..192 | zero |

A word that arrives close to a boundary can land in the neighbouring
microslice. That is accepted on purpose: downstream, timeslices are built from
overlapping runs of microslices.

The output FIFO (256 records of 513 bits) decouples the concentrator from the
PCIe side. Detector data cannot be stopped, so when `out_ready` stays low long
enough for the FIFO to fill, new records are dropped. Each drop is counted in
the next descriptor.

## Timing summary

| path | latency |
|------|---------|
| e-link word -> serializer output | 2..16 clocks (up to 31 behind a marker) |
| serializer output -> output-record load | same clock as the word that completes the record |
| load -> `rec_valid` (FIFO write) | 1 clock |
| FIFO -> `out_data` | first-word fall-through, same clock as the head is present |
| local time enters new microslice -> `flush` | 1 clock |

Throughput: 16 words per clock = 2560 Mwords/s at 160 MHz. That is more than
16 GBT links with 14 e-links each at full rate need (2389 Mwords/s). The record
stream carries 81.9 Gb/s.

## Parameters

| module | parameter | default | note |
|--------|-----------|---------|------|
| `sts_concentrator_top` | `N` | 4 | 2^N groups, 2^N x 32-bit records (N = 3: 256 bits, N = 5: 1024 bits) |
| | `NUM_ELINKS` | 15 | e-links per group, at most 15 |
| | `EPOCH_TIMEOUT` | 256 | idle clocks before an artificial epoch marker |
| | `FIFO_DEPTH` | 256 | output FIFO records, power of two |
| | `MS_LOG2` | 15 | microslice length 2^MS_LOG2 x 3.125 ns |
| | `TS_W` | 64 | local timestamp width |

Types and constants that several modules share live in `sts_conc_pkg`.

## What is taken from the published concept, and what is not

Taken from it:

* groups of up to 15 e-links serialized at 160 MHz;
* 32-bit words made of the 24-bit data and a source ID built from the e-link
  and GBT-link numbers;
* an N = 4 baseline network, built recursively, followed by bit-reverse
  ordering;
* DAQ words from consecutive inputs going to consecutive slots modulo 2^N, with
  non-DAQ words skipped;
* a 2^N-word auxiliary record and a 2^N-word output record, each with per-word
  write strobes, a concentrator controller driven by the DAQ-word flags, and an
  output FIFO;
* microslices bounded by the arrival time from a TFC-synchronised local
  counter;
* artificial epoch markers for silent e-links.

Choices of this design, where the concept leaves the detail open:

* the slot-based serializer and its two-word buffers;
* the field layout of the source ID;
* the epoch timeout, the marker header and the CRC polynomial;
* the controller's routing rule and the single-cycle, unpipelined datapath;
* how the work is split between the aux and output records;
* the output strobe taken from a register after the output record, rather than
  straight from the controller;
* flush with filler words at microslice boundaries;
* the FIFO depth and its drop-on-full policy;
* the microslice length, the descriptor and its layout;
* the TFC interface of the counter (a load strobe and value).

Not included:

* the GBT-link transceivers and the e-link 8b/10b decoding (the top takes
  decoded words);
* the PCIe DMA output module (the top ends in a valid/ready stream);
* the timing system itself.

The configuration with 24 GBT links used on the present readout board would
need N = 5 or two instances. With N = 4 the top takes 16. At N = 5 the 4-bit
GBT-link field of the source ID could no longer tell 32 groups apart. That
field would have to be widened to 5 bits, at the cost of a data bit or the
e-link field, or one bit of each group's `link_id` would have to come from
elsewhere.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares the
module against a model written independently of the RTL and prints
`TB_RESULT checks=<n> failures=<n>`:

| testbench | what it establishes |
|-----------|---------------------|
| `tb_baseline_network` | unrolled RTL equals a recursive reference model for random settings; every setting is a permutation |
| `tb_concentrator_controller` | 60k clocks of random flag patterns and flushes: slots, strobes and routing of every word to output bitrev(slot) |
| `tb_data_concentrator` | every record word for word against a queue model, filler padding, end flags, one record per clock at full input |
| `tb_concentrator_widths` | the same checks at N = 1, 3 and 5 (64-, 256- and 1024-bit records, up to 32 inputs), three instances side by side |
| `tb_elink_group_serializer` | full-rate operation (one word every clock), source IDs, per-e-link order, latency <= 16, marker-plus-word case, overrun |
| `tb_epoch_inserter` | marker after exactly TIMEOUT idle clocks, contents and CRC (computed by polynomial division) |
| `tb_aux_record`, `tb_output_record` | per-slot strobes and source selection |
| `tb_output_fifo` | queue model including full, drop and simultaneous read/write |
| `tb_local_ts_counter` | counting and TFC loads |
| `tb_microslice_generator` | flush timing, record order under random back-pressure, descriptor contents |
| `tb_sts_concentrator_top` | whole design at default parameters (below) |

`tb_sts_concentrator_top` drives 16 x 15 e-links for about 75,000 clocks,
covering more than four microslices, with the top at its default parameters.
A per-e-link scoreboard checks that every word comes out once, unchanged and
in order. It also checks every artificial marker's CRC, and every descriptor's
numbering and counts. The run includes:

* random traffic with back-pressure;
* all e-links at their maximum rate, where the concentrator must turn every 16
  words into a record without stalling;
* a long output stall that overflows the FIFO (after it, words need only stay
  in order);
* a TFC reload of the local time;
* a drain;
* a deliberate rate violation.

It counts each mechanism (full 16-word input clocks, records completed from
aux words, padded records, epoch markers, back-pressure, FIFO drops, the
microslice-number jump caused by the reload) and fails if one never occurs.
This testbench reads a few internal signals of the top by hierarchical name to
count those mechanisms.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/sts_conc_pkg.sv tb/tb_sts_concentrator_top.sv \
        --top-module tb_sts_concentrator_top -o sim
    ./obj_dir/sim

Replace the testbench name to run another one. The full-size top-level run
takes about a second.

What is not verified: timing closure at 160 MHz on an FPGA (the concentrator's
single combinational stage is the critical path, and a real implementation
would likely pipeline the controller), and interoperability with real GBT and
PCIe cores.
