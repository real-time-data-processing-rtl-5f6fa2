# C-RORC readout firmware with a TPC hardware cluster finder

The ALICE High Level Trigger (HLT) receives a copy of the detector data over
several hundred optical links. The links end on FPGA plug-in boards in the
input servers, called C-RORCs (Common Read-Out Receiver Cards). Each board
takes up to 12 links and writes their data into the host's memory by DMA.
Six of its channels can run the TPC raw data through a hardware cluster
finder. The finder replaces the ADC samples with a short list of charge
clusters before the data reach a CPU. The board can also replay recorded
events from its on-board memory as if they came from the links. Its output
channels send HLT results back to the data acquisition (DAQ), or throw them
away when the system is only being exercised.

This repository holds synthesizable SystemVerilog for that board logic, with
self-checking testbenches. It follows the ALICE HLT description of the
C-RORC and of its cluster finder:

- The paper gives the structure, the numbers and the behaviour: 12 links, six
  finder instances, three pipelined algorithm steps with buffering memories,
  replay with a settable event rate, DMA into host memory, and output discard.
- The paper does not give the word formats, the peak-splitting rule, the
  list sizes, the fixed-point formats or the DMA bookkeeping. This design
  chooses them. Each choice is named below and in the opening comment of the
  file that makes it.

## Data path of one board

```
 link c ──┐                      ┌─ hwcf (c < 6, cf_enable) ─┐
          ├─ src_replay mux ─────┤                           ├─ dma_channel c ─┐
 replay c ┘  (replay_ctrl)       └──── pass-through ─────────┘                 │
                                                                               ├─ dma_arbiter ─ host write port
 host ─ out_channel o (discard?) ─ DAQ link o                  (12 channels) ──┘
```

`crorc_top` builds this path for `NLINK = 12` channels, `NCF = 6` cluster
finders (channels 0 to 5) and `NOUT = 4` output channels. Everything runs
in one clock domain. The board clock of 312.5 MHz comfortably carries the
link rates: a 5.3125 Gbps link delivers about 133 M words/s, and every stage
here takes one 32-bit word per cycle.

Back-pressure is passed end to end with valid/ready handshakes on every
stream. When the host has not freed space in a channel's ring buffer, these
stall in turn, and `link_ready` of that channel finally drops:

- the DMA channel;
- the cluster finder;
- the replay unit or the link.

No stage drops data because of a stall. Data are dropped only in two places:

- the cluster finder's noise cuts;
- an output channel set to discard.

The parts outside the FPGA logic appear as ports of `crorc_top`:

- **Link receivers** (`link_*`): the serial transceivers and the link
  protocol are vendor IP and are not part of this design. Each link arrives
  as a 32-bit word stream with an end-of-event flag.
- **On-board memory** (`mem_*`): one in-order read port per replay unit.
- **PCI Express core**:
  - `wr_*` is a posted 128-bit host write port.
  - `hin_*` are host-to-card word streams for the output channels.
- **Configuration**: `chan_cfg` is one `chan_cfg_t` struct per channel.
  `gain_*` writes the gain tables. `out_discard` sets the output discard
  modes. These are plain ports; no register map is defined.

## Raw link format

The TPC raw data format is not part of this design. Internally, a link
carries these 32-bit words:

| word           | bits                                             |
|----------------|--------------------------------------------------|
| channel header | `[31]=1`, `[30:23]` pad row, `[22:15]` pad       |
| ADC sample     | `[31]=0`, `[19:10]` time bin, `[9:0]` ADC value  |

Other rules:

- A separate `last` flag marks the final word of an event.
- Samples of a pad follow its header in increasing time.
- Pads of a row come in increasing pad order.
- Zero-suppressed samples are simply absent.

The TPC numbers set the field widths:

- 10-bit ADC;
- 1000 time bins;
- 159 pad rows, with fewer than 256 pads per row.

The extractor asserts that rows and time bins stay within range.

## The cluster finder (`hwcf`)

A charged particle crossing a pad row leaves charge on a few neighbouring
pads over a few consecutive time bins. The finder groups those samples and
reports, for each group:

- its charge-weighted centre in pad and in time;
- its squared width in pad and in time;
- its total charge and its peak charge.

It does this in a stream, at link speed. Neither a whole row nor a whole
pad is ever buffered.

The work is split into the three steps of the algorithm, plus a divider
stage. Small FIFOs (`sync_fifo`, 16 entries) sit between the stages, so a
stage that is briefly slower, for example while flushing clusters, does not
stall the one before it.

```
link words ─ hwcf_extractor ─ FIFO ─ hwcf_peakfinder ─ FIFO ─ hwcf_merger ─ FIFO ─ hwcf_cog ─ serializer ─ cluster words
             samples+gain            time direction           pad direction          divide
```

### 1. Extraction and gain (`hwcf_extractor`)

- A header selects the pad. Its gain factor is read from a 2^16-entry table
  indexed by `{row, pad}`.
- Each sample becomes a token with charge `q = (adc * gain) >> 12`. The gain
  is unsigned, with 12 fraction bits, so 4096 means 1.0.
- The pad's end is marked with an end-of-channel token, which also carries
  the end-of-event flag at the end of an event.

### 2. Peaks in time (`hwcf_peakfinder`)

On one pad, a run of consecutive time bins forms a sequence. Along the
sequence the unit keeps:

- `sum q`, `sum q*t` and `sum q*t^2`;
- the peak charge and the time bin of the peak.

Two overlapping clusters show up as a dip between two maxima. The
offline reconstruction fits such shapes; the hardware splits them. The
rule used here:

1. Once the charge has started to fall, the lowest value since then is
   tracked.
2. If the charge rises more than `SPLIT_THR = 3` counts above that minimum,
   the sequence is closed, and the rising sample starts a new one.
3. A closed sequence whose peak is below `PEAK_MIN = 4` is dropped as noise.

This hysteresis is this design's stand-in for the noise-resistant peak finder
the experiment introduced in 2015. Its exact rule is not published.

### 3. Merging across pads (`hwcf_merger`)

This is the hardest part. The merger sees one pad at a time and has to join
each candidate to the right cluster from the previous pad. It keeps two
lists of at most `MAX_CAND = 8` open clusters:

- **prev**: clusters that reached the previous pad;
- **cur**: clusters that reach the current pad.

For each candidate, all prev entries are compared at once:

- **Match**: the candidate joins the first unused entry whose peak time is
  within `MATCH_DT = 2` bins. Its moments are added, and the cluster moves
  to cur.
- **No match**: the candidate opens a new cluster in cur.
- **Split in pad direction**: a cluster whose per-pad peak had already fallen
  is split when the candidate rises more than `SPLIT_THR` above the last pad's
  peak. The old cluster is finished, and the candidate starts a new one.

At the end-of-channel token:

- prev entries that found no continuation are finished, one per cycle;
- cur becomes prev.

If the next pad is not the neighbour of the last one (a gap, or a new row),
all of prev is finished first. At the end of the event everything is
finished, and an end-of-event token follows.

Finished clusters with total charge below `QTOT_MIN = 8` are dropped.

If cur is full, the candidate is sent on at once as a cluster of its own and
`overflow_cnt` counts it. Its charge is not lost, but the cluster it
belonged to is cut in two.

For a pad row, the merger needs `sum q*pad` and `sum q*pad^2`. It builds
these from the candidate's charge and the pad number, so the time moments
and the pad moments travel together as one `moments_t`.

### 4. Centre of gravity (`hwcf_cog`, `pipe_div`)

- A restoring divider with four lanes and 32 quotient bits, one bit per
  stage, divides:
  - `sum q*pad` and `sum q*t` by `Q`, with 6 fraction bits;
  - `sum q*pad^2` and `sum q*t^2` by `Q`, with 12 fraction bits.
- The squared width is `<x^2> - <x>^2`, clamped to `[0, 2^20-1]`.
- The unit takes one cluster per cycle. A result is on the output 34 cycles
  after its moments were taken. A stall at the output freezes the whole
  divider.

The reference model in the testbench uses exactly this arithmetic: integer
division that truncates. The results therefore match bit for bit.

### Cluster output format

Each cluster is the packed `cluster_t`, 114 bits. It is zero-extended to 128
bits and sent as 4 words, most significant word first:

| field      | bits | meaning                                    |
|------------|------|--------------------------------------------|
| `row`      | 8    | pad row                                    |
| `pad`      | 14   | mean pad, 8.6 fixed point                  |
| `t`        | 16   | mean time bin, 10.6 fixed point (top bits 0) |
| `sig2_pad` | 20   | squared pad width, 12 fraction bits        |
| `sig2_t`   | 20   | squared time width, 12 fraction bits       |
| `q`        | 24   | total charge                               |
| `qmax`     | 12   | peak charge                                |

Every event ends with one trailer word `{4'hE, 12'h0, cluster count}`, which
carries the `last` flag. An event without clusters is just the trailer.
Because the top 14 bits of the first word of a cluster are zero, a reader
can tell a trailer from a cluster by its tag.

## Replay (`replay_ctrl`)

A recording is stored in on-board memory as events back to back. Each event
is a length word, giving the number of data words (at least 1), followed by
the data words. The replay unit works as follows:

- It reads the memory region `[cfg_start, cfg_end)`.
- With `cfg_loop` set, it starts over at the end of the region.
- It emits each event with `last` on its final word.
- It starts an event no sooner than `cfg_period` cycles after the previous
  one started. This sets the replay event rate; 0 means back to back.

Read requests are issued only while the 8-entry response FIFO has room for
every read in flight, so any memory latency is tolerated, and the response
port needs no ready. Hold `cfg_enable` low for at least one cycle before
starting, so that the read address is loaded.

## DMA into the host (`dma_channel`, `dma_arbiter`)

### Data ring

Each channel owns a ring buffer in host memory at `buf_base`, of `buf_size`
bytes (a power of two).

- Words are packed four to a 128-bit beat, word 0 in the low bits.
- An event's last beat is padded with zero words, so every event starts
  16-byte aligned.

Two free-running byte counters control the ring:

- `wrptr`: the card's write pointer.
- `sw_rdptr`: the host's read pointer, written by the host.

A beat is written only while at least 16 bytes are free. Otherwise the
channel stalls and counts stall cycles.

### Report ring

After the last beat of event `n`, one 128-bit report is written to
`rep_base + 16 * (n mod rep_entries)`. The report is
`{32'h1, n, start offset, length in bytes}`, most significant first.

The host learns of a complete event by polling the report slot for the
expected sequence number. Then it reads the data and advances `sw_rdptr` by
the length.

The report ring has no pointer of its own. Make `rep_entries` at least
`buf_size / 16`, since no more events than that can be unread at once.

### Arbitration

The arbiter gives the single write port to the channels in round-robin
order, one write per grant, so every requesting channel is served at least
once in 12 writes. At one 16-byte write per cycle, the port carries 5 GB/s
at 312.5 MHz. That is more than the 3.6 GB/s that the board's PCI Express
link delivers.

## Output channels (`out_channel`)

An output channel passes a host event stream unchanged to its DAQ link,
including the link's back-pressure. With `cfg_discard` set, it instead
accepts the event at full rate and drops it. The setting is sampled at an
event's first word, so a change never cuts an event in two. Sent and
discarded events are counted.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NLINK` | 12 | links per board (published) |
| `NCF` | 6 | finder instances per board (published) |
| `NOUT` | 4 | 28 output links over 8 output nodes, rounded up (own choice) |
| `ADC_W`, `TIME_BINS`, `PAD_ROWS` | 10, 1000, 159 | TPC readout (published) |
| `FIFO_DEPTH` | 16 | own choice |
| `SPLIT_THR`, `PEAK_MIN` | 3, 4 | own choice |
| `MAX_CAND`, `MATCH_DT`, `QTOT_MIN` | 8, 2, 8 | own choice |
| `GAIN_FRAC`, `COG_FRAC` | 12, 6 | own choice |
| `HOST_W`, `ADDR_W` | 128, 64 | own choice |

## Departures from the published description

- **Where the centre of gravity is computed.** The published step list puts
  the centre-of-gravity calculation in the time-direction step. Here, moments
  are accumulated per pad, and the centre of gravity of the merged cluster is
  computed once, after merging. The result is the same weighted mean, with
  one divider per finder instead of one per pad.
- **Peak splitting and noise cuts.** The rules for peak splitting and for
  dropping noise are this design's own. The published finder's rules are
  not given.
- **Interfaces.** The cluster format, the DMA ring and report layout, the
  replay recording format and the link word format are all this design's
  own.
- **Not built.** The following are not part of this RTL:
  - the serial link receivers, including clock-domain crossing from the
    link clocks;
  - the PCI Express core;
  - the DRAM controller;
  - the card-side DMA that reads output data from host memory. The output
    channels take an already-fetched word stream.
  - any register interface.
- **Single clock.** The board clock is assumed to be the only clock.

## Verification

Each block has a testbench `tb/tb_<module>.sv`. Each testbench:

- checks the block against values computed independently;
- prints `TB_RESULT checks=N failures=M`;
- stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | random traffic against a queue model; full and empty behaviour |
| `tb_hwcf_extractor` | random gains and events with input gaps and output back-pressure; every token predicted |
| `tb_hwcf_peakfinder` | directed runs: a plain peak, a dip that must split, a small wiggle that must not, a peak below `PEAK_MIN` |
| `tb_hwcf_merger` | merging, gap flush, pad split, charge cut, the exact `MATCH_DT` edge, list overflow |
| `tb_hwcf_cog` | random moments against exact division; latency 34 cycles; one cluster per cycle |
| `tb_hwcf` | synthetic charge blobs (3 pads x 5 bins) in random non-touching places; clusters compared field by field with the expected centre, width and charge; trailer count; input rate of at least 0.8 words per cycle; output back-pressure |
| `tb_replay_ctrl` | random memory latency; event framing; event period; done and loop |
| `tb_dma_channel` | 256-byte ring against a slow consumer; stall, wrap-around, no overwrite of unread data; report fields |
| `tb_dma_arbiter` | order per port, fairness bound, strict rotation under full load |
| `tb_out_channel` | discard toggled at random, also within events; whole events only; counters |
| `tb_crorc_top` | the full board at default size; see below |
| `tb_crorc_rate` | the full board under link-rate loads: 6 TPC links at 3.125 Gbps through the finders, 12 links at 2.125 Gbps, 6 TRD links at 4.0 Gbps, and 12 links at 5.3125 Gbps as an overload |

`tb_crorc_top` runs the complete board with every parameter at its default.
Its traffic:

- finder channels with cluster checks, including a finder switched off and
  on between events;
- a finder channel left off;
- a merger overflow;
- replay into a finder, and a paced replay into a pass-through channel;
- a pass-through channel with a small ring and a slow consumer;
- two output channels, one of them toggling discard.

It counts each mechanism and fails if any of them never happened:

- cluster finding;
- finder bypass;
- finder mode switch;
- pass-through;
- replay;
- merger overflow;
- DMA stall;
- link back-pressure;
- arbitration between channels;
- output send;
- output discard.

It runs in well under a second.

`tb_crorc_rate` also runs at the default size. It feeds each active link at
a fixed average word rate. The rate is derived from the link speed with
8b/10b coding, relative to the 312.5 MHz board clock. The host frees ring
space at once. Results:

| load | words per cycle per link | largest backlog at a link |
|---|---|---|
| 6 TPC links, 3.125 Gbps, through the finders | 0.25 | 1 word |
| 12 links, 2.125 Gbps, raw (2.5 GB/s) | 0.17 | 4 words |
| 6 TRD links, 4.0 Gbps, raw | 0.32 | 4 words |
| 12 links, 5.3125 Gbps, raw (6.4 GB/s) | 0.425 | about 400 words |

In the first three loads the board keeps up, and every event and every
cluster arrives. The last load exceeds the 5 GB/s host write port. There the
links are held back, and still nothing is lost.

To simulate with Verilator 5, for example the board test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/hlt_pkg.sv tb/tb_hlt_pkg.sv rtl/sync_fifo.sv rtl/pipe_div.sv \
  rtl/hwcf_extractor.sv rtl/hwcf_peakfinder.sv rtl/hwcf_merger.sv rtl/hwcf_cog.sv \
  rtl/hwcf.sv rtl/replay_ctrl.sv rtl/dma_channel.sv rtl/dma_arbiter.sv \
  rtl/out_channel.sv rtl/crorc_top.sv tb/tb_crorc_top.sv \
  --top-module tb_crorc_top -Mdir obj_top
./obj_top/Vtb_crorc_top
```

For a single block, list `rtl/hlt_pkg.sv`, the block, the modules it uses
and its testbench. `tb/tb_hlt_pkg.sv` is needed only by the tests that use
the charge-blob helpers: `tb_hwcf`, `tb_crorc_top` and `tb_crorc_rate`.

The testbenches use two-state semantics and `$urandom` only, and drive
their inputs on the falling clock edge.

### Notes on the checks

- Verilator reports that `rst_n` is used both as an asynchronous reset and
  synchronously. The synchronous use is the `disable iff (!rst_n)` clause of
  the handshake assertions. It is not logic.
- The gain table of each finder is 2^16 x 13 bits. It is written as a plain
  array, so that a synthesis tool maps it to block RAM.
