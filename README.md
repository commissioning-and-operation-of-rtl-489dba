# Block-based trigger and readout firmware for one plane of a segmented SiPM detector

A detector plane has 64 SiPM channels, each digitised without pause at
40 MS/s with 14 bits. That is about 5 GB/s per plane. Only a tiny fraction
of it is worth storing: the few microseconds around a muon, the long
low-amplitude pulse train of a neutron capture, and the half-millisecond
*before* a neutron, where the matching positron may sit. This firmware
writes out only those pieces. It stores nothing else and still never
misses the history in front of a trigger.

The central idea is to stop thinking in samples. The sample stream of every
channel is cut into **blocks** of 256 samples (6.4 µs), and every decision is
made per block:

* Each channel keeps a **zero-suppressed history** of its recent blocks.
  These are the blocks whose fate is not yet known.
* Once per block, the plane decides whether a **trigger** fired in it.
* A trigger asks for a **window** of blocks around itself: for example 79
  blocks before and 32 after for a neutron. The same trigger is passed on to
  a set number of neighbouring planes, which mark the same window.
* When a block has aged past the longest window that could still claim it,
  the channel either drops it or copies it out. Overlapping windows merge on
  their own, because each block is either kept or not.

Working per block cuts the decision logic down from 40 MHz per channel to
one decision per 6.4 µs per plane. It also makes the bookkeeping a matter of
one bit per block.

All parameter defaults are those of the physics configuration of the real
detector. The ADC chip, the analogue front end, the clock tree, the Ethernet
and IPbus stack and the inter-plane links are not part of this RTL; their
signals appear as ports.

---

## 1. The data path of one channel

```
 serial ADC ─► adc_deser ─► −pedestal ─┬─► channel_trigger ──► (neu, he) to the plane
                                       │
                                       └─► latency_buffer (512 samples, NZS)
                                               │
                                               ▼
                                        zero_suppress ◄── threshold / off   (trigger_sequencer)
                                               │
                                               ▼
                                        window_buffer (1536 words, ZS history)
                                               │
                                               ▼
                                             cro  ◄── keep bit of the block (readout_sequencer)
                                               │
                                               ▼
                                        derandomiser (2048 words)
                                               │
                                               ▼
                                  data_buffer (all channels, in order)
```

`readout_channel` wires one such chain; `solid_plane` has 64 of them.

| stage | what it does | timing |
|---|---|---|
| `adc_deser` | Shifts in the 14-bit serial frames and cuts them into words at a bit position set by `slip`. It counts how many words equal a test pattern, to support the alignment scan. | Runs on the bit clock (14 × 40 MHz); the word is handed over once per frame. |
| pedestal | Subtracts a per-channel pedestal, giving a 15-bit signed sample. | 1 clock |
| `channel_trigger` | Counts the local maxima above T in the last W = 256 samples, and compares each sample with the high-energy threshold. | 1–2 clocks |
| `latency_buffer` | Delays the unsuppressed samples by exactly 512 samples (2 blocks) while the block's trigger decision is taken. | 512 clocks |
| `zero_suppress` | Keeps a sample if it is above the current threshold, or keeps all of them when suppression is off. It writes a *marker* word at every block start. | 1 clock |
| `window_buffer` | FIFO history of markers and kept samples. | — |
| `cro` | Looks at the oldest block. Once that block is `win_blocks` (82) blocks old, the `cro` drops it or copies it to the derandomiser. | 1 word/clock |
| `derandomiser` | FIFO of blocks chosen for readout, waiting for the concatenator. | — |

### Word formats

All buffers downstream of zero suppression hold 32-bit words. The two top
bits give the word kind.

| kind | bits |
|---|---|
| sample `00` | `[23:16]` index within the block, `[14:0]` signed sample |
| marker `11` | `[29]` dead, `[28]` overflow, `[27]` v0, `[26:12]` sample 0, `[11:0]` block number (low bits) |
| channel header `10` (data buffer only) | `[29]` dead, `[28]` overflow, `[27:16]` channel, `[15:0]` block number (low bits) |

A marker carries the block's first sample, and `v0` says whether that sample
passed suppression. An unsuppressed block therefore costs exactly 256 words,
not 257. Gaps in a suppressed block are implicit: every sample word carries
its index.

### Why a block is dropped or flagged, not cut

A block is always either whole or visibly incomplete. There is never a silent
hole. Three rules make sure of this:

* **Window buffer.** The window buffer admits a block only if a whole block
  (256 words) still fits, with a reserve of 128 words for markers left
  over. Otherwise it stores the block's marker with the **overflow** bit set
  and drops all of that block's samples.
* **Derandomiser.** The `cro` copies a kept block only if the derandomiser
  has room for a whole block. Otherwise it writes the marker alone with the
  **dead** bit set. This is *channel dead time*: the channel is excluded from
  that block.
* **Block boundaries.** Both buffers therefore always see every block
  boundary, and the concatenator never has to guess where a block ends.

---

## 2. Plane timing: who knows what, when

The plane keeps one global block counter `blk` and a sample index `idx`,
both counting from reset. All planes of the detector leave reset on the same
clock, so their counters agree, and a block number means the same 6.4 µs on
every plane.

```
block:           b-1         b           b+1         b+2
channel trigger  ..........[primitives for b]
trigger decision                        ^ idx 0 of b+1: fire for b
remote messages                         ^^^ first clocks of b+1
zero suppression            [ works on b-2 ][ b-1 ][  b  ][ b+1 ]
cro / readout    ... block b leaves the window buffer at b+82
```

* The trigger sequencer takes the decision for block b on its last sample
  and issues it on the first clock of b+1.
* The latency buffer delays the samples by 2 blocks, so at that moment
  zero suppression is just starting block b−1. A trigger can therefore still
  change the threshold for one block before its own, and for all blocks
  after it. This is why the lowered-threshold region is b−1 … b+2.
* A remote trigger reaches a neighbouring plane a few clocks after the local
  one. The first few samples of its block b−1 may then keep the old
  threshold.
* Block b is read (or dropped) when `blk − b ≥ win_blocks`. With the default
  82 blocks (525 µs), a neutron trigger can ask for 79 blocks of history. It
  can also ask for 32 blocks of future, since those are still arriving when
  it fires.

---

## 3. Triggers

`trigger_sequencer` ORs the per-sample channel primitives over each block
and fires any of three types.

| type | condition | window (blocks) | planes either side | ZS in its region |
|---|---|---|---|---|
| random | every `rnd_period` blocks (130208 ≈ 1.2 Hz) | 0 … +1 (12.8 µs) | 49 (whole detector) | off |
| neutron | some channel saw more than N = 17 peaks above T = 0.5 PA in 256 samples | −79 … +32 (−500/+200 µs) | 3 | lowered to 0.5 PA |
| high energy | a sample above 50 PA in an X channel **and** in a Y channel | 0 … 0 | 0 | default 1.5 PA |

Thresholds are in ADC counts above pedestal. 1 PA (photo-electron
amplitude) is taken as 32 counts, because the channels are gain-equalised
and the true figure is a property of the detector.

Channels 0–31 are taken as one fibre direction (X) and 32–63 as the other
(Y). Every setting is a field of `cfg_t` (`solid_pkg`). The physics values
are in `CFG_PHYSICS`.

**Back pressure.** While `busy` is high, the trigger sequencer fires nothing.
`busy` is high when the data buffer, the header buffer or any derandomiser
is nearly full. Each such block is counted as *plane dead time*. Triggers
received from neighbours are still honoured.

**Trigger records.** Every local trigger writes a 64-bit trigger record to
the header buffer: its block and the types fired.

### Remote triggers (`remote_trigger`)

Each plane has two message ports towards each neighbour. A message carries
the trigger type, the low 8 bits of the block number and a hop count.

* **Local trigger.** The plane sends one message to each side, with hops
  equal to the type's `planes` setting.
* **Received message.** The plane delivers it to its own sequencers. If hops
  > 1, it forwards it in the same direction with hops − 1. A trigger
  therefore reaches exactly `planes` planes on each side.
* **Priority.** Forwarded messages go before new local ones, one per clock
  and direction.

### Readout decisions (`readout_sequencer`)

`keep` is a 256-bit ring indexed by block number modulo 256.

* **Marking.** Each local or delivered trigger sets the bits of its window.
  Overlapping windows simply merge.
* **Clearing.** A bit is cleared when its block is 128 blocks old, so
  `win_blocks` must stay below 128 (an assertion checks this).
* **Readout record.** The `cro` of every channel reads the same bit when the
  block leaves its window buffer. In the same block, the sequencer writes a
  *readout record* to the header buffer: the block number, the local and
  remote trigger types that asked for it, and the number of plane-dead blocks
  since the previous readout record.

Dead time is therefore encoded in the output in two ways: per plane in these
records, and per channel in the dead flag of each channel header.

---

## 4. Zero suppression control

The trigger sequencer keeps two block ranges: one where the threshold is
lowered and one where suppression is off. Each trigger, local or remote,
widens the range for its type's mode:

* **Lowered threshold:** blocks b−`zs_pre` … b+`zs_post` (default b−1 … b+2).
* **Suppression off:** exactly the blocks the type reads out. The pre-trigger
  part is limited to `zs_pre`. Each unsuppressed block costs 256 words in
  every window buffer, so the region is kept no larger than needed.

When regions overlap, the lowest threshold wins: off beats lowered, and
lowered beats the default of 1.5 PA.

---

## 5. Output: header buffer and data buffer

`header_buffer` is a FIFO of 64-bit records. Layout of `header_t`, from the
top bit down:

| field | bits |
|---|---|
| is_readout | 1 |
| block number | 24 |
| local types | 3 |
| remote types | 3 |
| dead blocks | 16 |
| reserved | 17 |

Trigger records and readout records share the FIFO; a readout record goes
first when both arrive on the same clock.

`data_buffer` has a concatenator that visits the derandomisers in channel
order. For each read-out block it writes, for channel 0 to 63:

1. a channel header;
2. sample 0, taken from the marker, if it passed suppression;
3. the channel's sample words.

Every channel takes part in every read-out block. The derandomisers
therefore stay in step, and the n-th readout record belongs to the n-th
group of 64 channel headers. The stream is 32-bit words read one per
`db_rd`.

Throughput is one word per clock (160 MB/s per plane). Each channel visit
costs about two clocks besides its samples.

---

## 6. Sizes and resources

| parameter (`solid_plane`) | default | origin |
|---|---|---|
| `NCH` | 64 | detector: 64 fibres per plane |
| `WINDOW` | 256 | neutron trigger window W |
| `LAT` | 512 | latency buffer, samples |
| `WB_DEPTH` | 1536 | window buffer, words |
| `DR_DEPTH` | 2048 | derandomiser, words |
| `DB_DEPTH` | 16384 | data buffer, words (this design's choice) |
| `HB_DEPTH` | 1024 | header buffer, records (this design's choice) |
| `DB_HWM` | `DB_DEPTH/4` | data-buffer back-pressure margin (this design's choice) |

**Memory.** At the defaults the plane needs 8.4 Mb of memory:

* 64 × (512 × 15 + 1536 × 32 + 2048 × 32) bits for the channels;
* 0.6 Mb for the two output buffers.

That fits the 13.1 Mb of block RAM of an XC7A200-class FPGA.

**History.** The 1536-word window buffer covers 82 blocks when the data
compress by 50, which is typical at a 0.5 PA threshold. It can also take a
random trigger's two unsuppressed blocks on top of that.

**Limits.** The history cannot exceed 127 blocks, because of the 256-entry
keep ring. A 2 ms history would need a wider ring.

---

## 7. Where this design departs from the original system

* **ZS region before a trigger.** The lowered-threshold region starts one
  block before the trigger, not two. A 512-sample latency buffer only allows
  one block of look-back; a 768-sample buffer would allow two.
* **Where channels are excluded.** A channel is dropped from a block when
  its derandomiser has no room at the moment the block arrives from the
  window buffer. The concatenator itself never drops data: when the data
  buffer is full it waits, and the back pressure halts triggers. The original
  system describes exclusions as happening during concatenation. The effect
  for a reader of the data is the same: a flagged channel in a read-out
  block.
* **Suppression-off region.** It covers exactly the random trigger's readout
  window, not ±2 blocks.
* **High-energy threshold.** It is a per-sample 50 PA threshold with X–Y
  coincidence. An energy-based threshold (for example in MeV) would need
  per-channel calibration, which is not built.
* **ADC alignment.** Only the bit slip and the test-pattern comparison
  exist. The fine (tap) delay is an FPGA delay primitive outside this RTL.
* **Not built.** The playback and signal-generator data sources, IPbus, the
  serial daisy-chain links, sensors and clock boards. Configuration arrives
  as the `cfg`, `ped` and `ch_mask` ports. The output buffers are plain FIFO
  read ports.
* **Formats.** All word and record formats, buffer sizes not stated above,
  and the exact cycle timing are this design's own.

---

## 8. Files

`rtl/` holds the synthesizable code:

* `solid_pkg.sv`: types, formats and `CFG_PHYSICS`;
* `solid_plane.sv`: the top;
* `readout_channel.sv`: one channel chain;
* `sync_fifo.sv`: the common FIFO;
* one file per block named in the sections above.

Each file opens with a description of its interface and timing.

`tb/` holds one self-checking testbench per block (`tb_<module>.sv`) and
two for the whole plane:

* `tb_solid_plane`: three 8-channel planes chained together, run for 150
  blocks. All three trigger types, remote triggers, lowered and disabled
  suppression, merged windows, and plane and channel dead time occur; the
  last two are forced by stopping the readout of one plane. Every output
  sample is compared with the generated waveforms.
* `tb_solid_plane_full`: one plane at full size with all parameters at their
  defaults and the physics configuration, run for about 230 blocks. Only the
  random period is shortened, through `cfg`. It takes under a minute.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` at the end.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/solid_pkg.sv tb/tb_solid_plane.sv \
          --top-module tb_solid_plane -o sim && ./obj_dir/sim
```

The testbenches drive the serial ADC inputs with a bit-accurate model of
14-bit frames, skewed per channel and compensated by `slip`. They start
every plane from reset, as the real system's soft reset at the start of a
run does.
