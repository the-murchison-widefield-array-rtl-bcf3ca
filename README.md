# MWA hybrid FX correlator data path in SystemVerilog

The Murchison Widefield Array (MWA) correlates 128 dual-polarisation antenna
tiles over 3072 fine frequency channels of 10 kHz. The "F" part runs in two
stages: the field receivers split the band into 24 coarse channels of
1.28 MHz, and four filterbank (PFB) boards split each coarse channel into 128
fine channels. The "X" part is a cross-multiply-and-accumulate (XMAC) stage on
24 nodes, one per coarse channel. Between the two stages, every node needs the
data of every antenna, but each PFB board holds only a quarter of the
antennas, for all channels. So the data must be re-routed from "one board, all
channels" to "one channel, all antennas".

This RTL models that path as one synchronous design: the stages after the
fine filterbank, and the alignment buffer in front of it. It takes the fibre
streams into the boards and delivers visibility records of one or half a second, one
stream per node. The filterbank arithmetic is not part of the RTL; its input
and output are ports of the top module.

```
fibres --> pfb_input_align --> [fine PFB, outside] --> pfb_packetiser (x32 lanes)
       --> vcs_capture --> vcs_demux --> cross_connect --> xmac_node (x24)
                                                           |- xmac_assembly (corner turn, 2 blocks)
                                                           |- xmac_engine   (x * conj(y), integrate)
                                                           '- xmac_output   (float, framing)
```

All sizes are parameters. They default to the deployed system:

| quantity | default | where |
|---|---|---|
| PFB boards | 4 | `NPFB` |
| fibres per board | 12 | `NFIBRE` |
| lanes per board | 8 (32 in all) | `NMGT` |
| inputs per board | 64 (32 tiles x 2 pol) | `NIN` |
| fine channels per packet | 4 | `NF2` |
| packet groups per lane channel | 4 | `NGROUP` |
| coarse channels | 24 | `NCOARSE` |
| samples per 50 ms bank | 500 | `NFRAME` |
| banks per second | 20 | `NBANK` |
| correlation nodes | 24 | `NEP` |
| fibre alignment buffer | 16 samples (+/-8) | `ALIGN_DEPTH` |

## 1. Aligning the fibres (`pfb_input_align`)

A PFB board takes 12 fibres from receivers at different distances. Each fibre
marks the first sample of every second with a tick. Each fibre has a 16-word
FIFO. While hunting, a fibre throws words away until its tick arrives, then
keeps the tick word at the head of its FIFO. When all twelve heads are ticks,
the buffer is aligned, and one word of every fibre leaves per cycle.

The buffer flushes all FIFOs and hunts again in two cases:

- a FIFO overflows, which means the skew is larger than the buffer;
- some heads show a tick and others do not.

A skew beyond +/-8 samples therefore never aligns. The board's true delay is
then unknown, and this design does not guess it.

## 2. The lane packet (`mwa_pkg`, `pfb_packetiser`)

Each board drives 8 serial lanes. One lane carries 3 coarse channels (24 / 8).
A packet is one time sample of 4 adjacent fine channels for the board's 64
inputs, in 132 words of 16 bits:

| word | content |
|---|---|
| 0 | header `16'h0800` |
| 1 | `{pfb_id[15:14], mgt_id[13:11], mgt_bank[10:6], 5'b0, sec_tick[0]}` |
| 2 | `{mgt_channel[15:11], mgt_group[10:9], mgt_frame[8:0]}` |
| 3..130 | data: two 8-bit samples per word, 4-bit real (upper nibble), 4-bit imaginary |
| 131 | XOR of the 128 data words |

The header word cannot be mistaken for data, because the code 8 (-8) is not a
legal sample. Within a packet the input index runs fastest, then the fine
channel. From slowest to fastest, the packets of a lane cycle through:

- bank (0..19)
- coarse channel (0..23)
- 40 kHz group (0..3)
- frame (0..499)

`sec_tick` is set on the first packet of a second, where all counters are 0.

The following are this design's choices:

- The bit positions of the fields other than `sec_tick`.
- A 9-bit frame field. A 5-bit field cannot count to 499.
- The packetiser starts a packet only when the filterbank has data waiting. A
  packet then takes 132 cycles.

## 3. Capture and routing (`vcs_capture`, `vcs_demux`, `cross_connect`)

`vcs_capture` receives one lane and works as follows:

- **Packet framing.** It hunts for the header word and stores the packet in
  one of two slots.
- **Checks.** It checks the XOR checksum. It also checks that the counters
  follow the previous good packet's counters.
- **Synchronisation.** A tick packet synchronises the lane. These events drop
  synchronisation until the next tick, and only synchronised, intact packets
  are forwarded:
  - a bad checksum;
  - a counter sequence break;
  - a packet lost because both slots were full.
- **Second labels.** Every forwarded word carries the label of its second. The
  label advances whenever a packet's position in the second does not follow
  the previous one. A lost tick packet therefore does not cost the second.
- **Counters.** Five counters report the events: good packets, checksum
  errors, sequence errors, drops while unsynchronised, and overflows.

`vcs_demux` looks up the node for the packet's coarse channel in a fixed table,
`node = channel / (NCOARSE/NEP)`. `cross_connect` stands in for the Ethernet
switch. Each node port picks a lane round-robin among those with a packet for
it, and keeps that lane until the packet's last word. This keeps packets whole.

**Throughput.** A lane sends all packets of one coarse channel back to back:
2000 packets per bank. In that time, all 32 lanes feed the same node. A node
link carries one word per cycle, so a lane can keep up only if it sends at
most 1/32 of its peak rate. The deployed system smooths these bursts with
large host memories, which are not modelled here. The capture stage has only
two packet slots. When the filterbank side runs faster than the node link,
packets are lost. The loss is detected and counted, and the lane resynchronises
on the next tick. The end-to-end testbench paces the lanes so that the link
can carry them, and it also drives an overload on purpose.

## 4. Assembling a second (`xmac_assembly`, `sample_promote`)

A node fills a block that holds one second of data for its channels. The block
is ordered time, channel, station, polarisation, real/imaginary (slowest
first). Every incoming data word is written straight to its place. That write
address is the corner turn:

```
t  = mgt_bank * NFRAME + mgt_frame
ch = ((coarse_local * NMGT + mgt_id) * NGROUP + mgt_group) * NF2 + f2
st = pfb_id * NIN/2 + (word index mod NIN/2)       f2 = word index div NIN/2
```

A station here is the pair of inputs in one 16-bit word. The two samples are
taken as its two polarisations. The boards' inputs are concatenated in packet
order and never re-ordered. Any re-mapping of inputs to physical tiles is left
to the consumer of the visibilities. On the way in, each 4-bit part is
sign-extended to 8 bits (`sample_promote`). The invalid code 8 becomes 0, so it
adds nothing to the sums.

There are two blocks. A second with an even label fills block 0, an odd one
block 1. Each block is in one of four states: FREE, FILL, FULL or BUSY (owned
by the engine). For an incoming word, let `age` be its second minus the
second of the block it maps to.

| block state | age | action |
|---|---|---|
| FREE | any | write, block becomes FILL with this second |
| FILL | 0 | write |
| FILL | > 0 | discard the old partial second, restart the block (counted as resync) |
| FILL | < 0 | drop the word (counted as late) |
| FULL / BUSY | > 0 | **stall**: `in_ready` low until the engine frees the block |
| FULL / BUSY | <= 0 | drop (late) |

A block becomes FULL when every one of its `NT*NCH*NST` words has been
written. A new second that runs ahead of the engine is held back, never
overwritten. That back-pressure travels through the cross-connect into the
capture slots. An incomplete second is never correlated.

At the defaults, a block has 10000 x 128 x 128 words of 32 bits, and the node
holds two of them. That is 1.3 GB, written as a plain array.

## 5. Correlating (`xmac_engine`)

The engine takes the oldest FULL block. For every output channel `c`, every
station pair `s1 >= s2`, and the four polarisation pairs, it computes:

```
V[c][s1][s2][p1][p2] = sum over t and over the 2^fs channels averaged into c of
                       x[t][ch][s1][p1] * conj(x[t][ch][s2][p2])
```

`fscrunch_log2` (`fs`) selects averaging over 1, 2, 4 or 8 channels, that is
10, 20, 40 or 80 kHz resolution. It is sampled when a block starts.

`half_sec`, also sampled when a block starts, selects 0.5 s integration. The
engine then makes two passes over the block: the first sums samples
`0 .. NT/2-1`, the second `NT/2 .. NT-1`. Each pass gives its own record, and the
block is released only after the second. The total engine time is the same as
for one pass over the whole second. NT must be even for this mode.

The engine reads the two stations' words through two registered ports. It does
one station pair (all four polarisation products) per clock, and accumulates
in 32-bit integers. Integers are exact here: the largest sum is 8 x 10000
products of magnitude at most 128, below 2^24. Its conversion to single
precision is therefore the same as accumulating in floating point.

Each visibility takes `NT*2^fs + 2` cycles. A block takes
`NBASE * (NCH/2^fs) * (NT*2^fs + 2)` cycles, where NBASE = NST(NST+1)/2. At the
defaults that is about 1.06e10 cycles. So one engine per node is a functional
model, not a real-time one: real time would need about 40 such engines per node
at 266 MHz.

## 6. Output records (`xmac_output`, `int_to_float`)

Each visibility leaves as 8 single-precision words: real and imaginary parts
for (p1,p2) = (0,0), (0,1), (1,0), (1,1). Conversion rounds to nearest, ties to
even. The visibilities follow the engine's order: channel, s1, s2 (lower
triangle including autocorrelations).

A record consists of:

- word 0: the time tag, with the second label in bits 15:0 and, in half-second
  mode, the half (0 or 1) in bit 16;
- word 1: the number of visibility words;
- the visibility words;
- zero padding up to a multiple of 720 words, one 2880-byte FITS block.

`out_sop` marks the first word of a record and `out_eop` the last. A binary
two-word header stands in for the text header of a FITS file.

A holding register keeps one visibility while its eight words are sent, so the
engine computes the next one at the same time. A record therefore takes the
larger of the engine time and 8 cycles per visibility, plus the header and
padding, when the archive is always ready.

## 7. Top level (`mwa_correlator`)

The top instantiates:

- one aligner per board;
- a packetiser, capture stage and router for each of the 32 lanes, where lane
  `l` is board `l/8`, `mgt_id = l%8`;
- the cross-connect;
- 24 nodes.

Its ports are arrays:

| ports | meaning |
|---|---|
| `fib_*` | fibres in |
| `pfb_in_*` | aligned fibre words out, to the filterbank |
| `ch_*` | channelised words in, from the filterbank, with a ready |
| `arc_*` | archive streams out |
| `fscrunch_log2`, `half_sec` | output mode of every node |
| `lane_*`, `node_*`, `pfb_realign` | status counters |

## Departures from the published system

- **Filterbank stages.** The receivers' coarse filterbank and the boards' fine
  filterbank are not included. Their coefficients and internal structure are
  not specified.
- **Host buffering.** The capture hosts' large ring buffers and their TCP
  transport are replaced by a two-slot store-and-forward stage and a packet
  crossbar. See the throughput note in section 3.
- **Second labels.** They come from counting ticks and packet positions, not
  from a UTC clock. A lane that loses more than a whole second can carry a
  label one second behind the other lanes. The node then sees two different
  seconds, and the stale one is discarded or dropped as late.
- **Integration time.** 1 s (one block) and 0.5 s (`half_sec`) are provided.
  2 s integration, also used in practice, is not: it would need accumulation
  across two blocks.
- **Accumulator type.** The accumulators are integers, converted to float once
  per block. As shown above, the result is identical to float accumulation for
  these sizes.
- **Conjugation convention.** `x_s1 * conj(x_s2)` is a choice. The original
  system's convention is not stated.
- **Archive format.** The record header is two binary words, not FITS cards.
  Incoherent beamforming, voltage recording and the archive are not included.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl +libext+.sv rtl/mwa_pkg.sv \
          tb/tb_mwa_correlator.sv --top-module tb_mwa_correlator
./obj_dir/Vtb_mwa_correlator
```

| testbench | what it checks |
|---|---|
| `tb_sample_promote` | all 256 codes |
| `tb_pfb_input_align` | alignment within the buffer, endless re-hunt beyond it, re-alignment |
| `tb_pfb_packetiser` | packet words, counter sequence, tick, checksum, 132-cycle packet time |
| `tb_vcs_capture` | sync, checksum and sequence errors, overflow, second labels |
| `tb_vcs_demux` | routing table, unroutable channels |
| `tb_cross_connect` | whole packets, no interleaving, word order, round-robin service of every lane |
| `tb_xmac_assembly` | corner-turn addresses, stall, late drop, restart, read-back |
| `tb_xmac_engine` | every visibility value and the exact cycle count of a block |
| `tb_xmac_output` | float conversion, record layout, padding |
| `tb_xmac_node` | whole seconds in all four averaging modes against a reference correlator, latency bound, restart, late drop, stall, half-second records |
| `tb_xmac_node_stations` | one node at the full 128 stations and 128 channels (4 time samples per second), every word of 1- and 4-channel records, record time |
| `tb_mwa_correlator` | the whole path end to end (see below) |

The end-to-end testbench runs the top at a reduced size:

- 2 boards of 2 fibres;
- 2 lanes per board;
- 4 inputs (2 stations) per board;
- 2 coarse channels and 2 nodes;
- 2 banks of 2 frames per second.

It plays the filterbank with hashed sample data, and compares every record
word for word with a correlator written in the testbench. It also forces, and
counts, each of these events:

- fibre realignment;
- a checksum error;
- capture overflow;
- drops while unsynchronised;
- assembly stall;
- assembly restart;
- record padding;
- all four averaging modes;
- half-second records.

It counts a failure for any event that never happened.

**Full-size simulation.** No testbench runs the top at its default size. One
second of one node is about 1e10 engine cycles, and the two assembly blocks
alone need 2.6 GB per node. The largest configuration simulated end to end is
the reduced size described above. A single node is also simulated at its full
128 stations and 128 channels, with the second shortened to 4 time samples
(`tb_xmac_node_stations`).
