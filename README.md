# A 24-channel time-to-digital converter for drift-tube read-out

Each channel of this chip gets the discriminated pulse of one drift tube.
The pulse is high while the tube signal is over threshold (time over
threshold, TOT). The chip measures the time of both edges of each pulse. It
uses bins of about 781 ps over a range of 102.4 µs, which is about one LHC
orbit. Every edge is sent off chip as a 23-bit word on one of two serial
lines.

The main idea is how a fine resolution is reached without a fast clock. The
chip runs at 320 MHz, one period being 3.125 ns. It does not sample the hit
with a faster clock. The hit signal itself is the clock of four flip-flops,
and these flip-flops sample four phases of the 320 MHz clock at 0, 90, 180
and 270 degrees. The four sampled levels tell in which quarter of the period
the hit came. That quarter is the 2-bit fine time. A 15-bit count of clock
periods is the coarse time. Together they make a 17-bit time.

This RTL describes a published chip design for the upgrade of the ATLAS
Monitored Drift Tube read-out. Where the publication gives the logic, the RTL
follows it: fine sampling, the correction table, the two coarse counters and
how one is picked, the two slices per channel, the word format, and the
channel and port counts. Where the publication names a function but not its
logic, the RTL adds its own, and says so in each file header and in the
section "Choices made here" below. This holds for the clock-domain hand-over,
edge pairing, FIFO depth, arbitration and serial framing.

## Structure

```
tdc_asic_top
├── tdc_coarse_counter          one pair CNT1/CNT2, shared by all channels
├── tdc_channel  x24            g_ch[c].u_chan
│   ├── tdc_slice  (leading)    u_lead
│   └── tdc_slice  (trailing)   u_trail, sees the inverted pulse
│       ├── tdc_fine_sampler    4 flip-flops clocked by the hit
│       ├── tdc_fine_encoder    correction table -> 2-bit fine time
│       ├── tdc_coarse_capture  samples CNT1/CNT2, picks one
│       └── toggle synchroniser -> logic clock (160 MHz)
└── tdc_channel_logic           160 MHz
    ├── tdc_edge_pairing x24    word building, edge or pair mode
    ├── tdc_fifo         x24    one FIFO per channel
    ├── tdc_readout_arbiter x2  priority read-out, 12 channels each
    └── tdc_serializer      x2  160 or 320 Mbps
```

`tdc_pkg` holds the sizes, the word struct and the mode and rate
encodings.

## Fine time: four samples of the clock

The signal `q[3:0]` holds the levels of the 270, 180, 90 and 0 degree clocks
at the rising hit edge, with `q[0]` as the 0 degree clock. With ideal clocks
each quarter period gives one code:

| quarter after the 0° rising edge | q[3:0] | fine |
|---|---|---|
| 0 – 781 ps      | 1001 | 0 |
| 781 – 1562 ps   | 0011 | 1 |
| 1562 – 2344 ps  | 0110 | 2 |
| 2344 – 3125 ps  | 1100 | 3 |

Real clocks give other codes too:

- A sampling flip-flop can go metastable when the hit comes very close to a
  clock edge.
- The 0/180 pair, or the 90/270 pair, may not be exactly complementary.
  Then a short gap opens around the edge, and in that gap both clocks of
  the pair read the same level.

At any of the four clock edges, only the two samples of the pair that is
switching can be wrong. The other two are stable. So eight more codes can
occur, and each can be corrected from its two stable bits (`tdc_fine_encoder`):

| q[3:0] | fine | |
|---|---|---|
| 1001, 1101, 1000 | 0 | 1101, 1000: corrected |
| 0011, 1011, 0001 | 1 | 1011, 0001: corrected |
| 0110, 0010, 0111 | 2 | 0010, 0111: corrected |
| 1100, 0100, 1110 | 3 | 0100, 1110: corrected |
| 0000, 0101, 1010, 1111 | 0 | cannot occur; `invalid` |

Each corrected code is assigned to one side of the edge. A hit inside a gap
can therefore come out one bin late or one bin early. It is never more than
one bin off. Take the code `1100` when it is produced just after a 0° rising
edge. It is encoded as fine 3, and the coarse counter then supplies the
previous period, so the result is one bin early. The correction itself
needs no special case: it falls out of the counter choice described next.
`tb_tdc_slice` and `tb_tdc_asic_top` shift the 180° clock by 80 ps and 60 ps,
aim hits into the gaps, and check that every result stays within one bin.

## Coarse time: two counters half a period apart

A counter that the hit samples is itself changing right at a clock edge. If
the hit arrives then, the sampled value may be wrong in any bit. The design
therefore keeps two 15-bit counters:

- CNT1 counts on the rising edge of the 0° clock.
- CNT2 counts on its falling edge.

After reset both counters are 0, and CNT2 steps first. Take period k, which
starts at the k-th rising edge after reset:

```
clk_0      ‾‾‾‾‾‾‾‾‾‾‾‾|____________|‾‾‾‾‾‾‾‾‾‾‾‾|___
           high half k  low half k   high half k+1
CNT1       k  (switches at the rising edge)          k+1
CNT2       k             k+1 (switched at the falling edge)
fine       0       1     2      3     0
uses       CNT2  CNT2    CNT1  CNT1   CNT2
```

Bins 0 and 1 lie just after the rising edge, where CNT1 may be switching,
so they use CNT2. CNT2 is stable there because it last changed half a period
earlier. Bins 2 and 3 lie just after the falling edge, so they use CNT1. Both
choices give k. The sample registers and the multiplexer are in
`tdc_coarse_capture`, one per slice. The counter pair is shared by all 48
slices. The counters wrap after 2^15 periods, which is 102.4 µs.

## A channel and the hand-over to the logic clock

A slice (`tdc_slice`) times the rising edges of its input. A channel
(`tdc_channel`) has two slices. The second one gets the inverted pulse, so it
times the falling edge. With a slice for each edge, the pulse width is not
limited by the dead time of a slice: a 1 ns pulse is timed on both edges.

The result of a slice sits in registers clocked by the hit. A toggle flag,
also clocked by the hit, crosses into the 160 MHz logic clock domain:

- The flag passes through two synchronising flip-flops.
- A change of the synchronised flag copies the time into the logic domain
  and pulses `valid` for one cycle.

`valid` comes 3 to 4 logic cycles after the hit.

**Constraint:** two edges on the same slice must be more than 4 logic cycles
(25 ns) apart. This means two rising edges, or two falling edges, of one
channel. A closer second edge overwrites the first before it is read.

## Channel logic: words, pairing, buffering, read-out

**Word** (23 bits, `tdc_pkg::tdc_word_t`, most significant field first):

| bits | 22:18 | 17 | 16:15 | 14:0 |
|---|---|---|---|---|
| field | channel ID | 1 = leading, 0 = trailing | fine | coarse |

The 17-bit time is `{coarse, fine}` in units of 781.25 ps. Count 0 is the
320 MHz period that starts at the last `clk160` rising edge that samples
`rst` high.

**Edge pairing** (`tdc_edge_pairing`, one per channel) has two modes:

- Edge mode: every edge becomes a word.
- Pair mode: a leading edge is held until a trailing edge comes. The two are
  then written as two consecutive words of that channel's FIFO, leading
  first.

In pair mode, edges that cannot be paired are dropped and flagged with an
`unpaired` pulse. This covers a trailing edge with nothing held, and a held
leading edge that a newer one replaces. Each edge first waits in a pending
register, one for each edge type. If both registers are full, the edge that
came first is written first. A new edge that finds its pending register
still full is lost and flagged with an `overflow` pulse. This happens only
when the FIFO has stayed full. A disabled channel (`ch_enable`) ignores its
slices.

**FIFOs** (`tdc_fifo`): one per channel, 8 words deep, first-word
fall-through.

**Read-out** (`tdc_readout_arbiter`): channels 0–11 share port 0, and
channels 12–23 share port 1. Each cycle the arbiter takes the lowest-numbered
non-empty FIFO of its port, so channel 0 of a port has the highest priority.
A channel that is busy enough can starve the channels above it. Pairs are
adjacent within one channel's FIFO. On the serial line, words of other
channels may come between them.

**Serial ports** (`tdc_serializer`): each frame is a start bit `1` and then
the 23 word bits, MSB first. The line is `0` while idle. The serializer runs
on the 160 MHz clock and gives two bits per cycle on `sdo[1:0]`, with
`sdo[1]` first. A double-data-rate output cell sends them, and that cell is
not part of this RTL.

- At 320 Mbps a frame takes 12 cycles, so a port carries 13.3 M words/s.
- At 160 Mbps both bits are equal and a frame takes 24 cycles.

Frames follow each other without gaps.

## Top-level interface (`tdc_asic_top`)

| port | dir | meaning |
|---|---|---|
| `hit[23:0]` | in | discriminated TOT pulse of each channel |
| `clk320_0/90/180/270` | in | four phases of the 320 MHz clock |
| `clk160` | in | logic clock; its rising edges coincide with those of `clk320_0` |
| `rst` | in | synchronous to `clk160`; resets logic and coarse counters |
| `mode` | in | `MODE_EDGE` / `MODE_PAIR` |
| `rate` | in | `RATE_160` / `RATE_320` |
| `ch_enable[23:0]` | in | channel enables |
| `sdo[1:0][1:0]` | out | two bits per `clk160` cycle for each port |
| `overflow`, `unpaired`, `fine_exception` [23:0] | out | one-cycle status pulses for each channel |

The default parameters give the full chip: `N_CH = 24`, `CH_PER_PORT = 12`
and `FIFO_DEPTH = 8`.

## Not in this RTL

- **PLL.** On the chip, a PLL makes the 320 MHz phases and the 160 MHz clock
  from the 40 MHz LHC clock. Here they are top-level inputs.
- **Pads.** The LVDS receivers of the hits and of the LHC clock, and the
  LVDS/DDR output drivers, are not modelled. Only their logical signals
  appear as ports.
- **Time calibration.** The chip's channel logic also does a time
  calibration, but its function has not been published, so it is missing
  here.
- **Configuration interface.** Mode, rate and enables are plain inputs,
  because how the chip loads them is not published.
- **Timing of the sampling cell.** The sampling flip-flop is a plain
  flip-flop. Its short setup and hold time, and the balanced clock
  distribution that keeps the bins even, are matters of layout and cannot be
  expressed in RTL.

## Choices made here

The published design does not give the following, so they are choices of
this RTL:

- The toggle hand-over from the hit domain, and the 25 ns spacing it needs on
  one slice.
- One shared coarse-counter pair. The chip's floor plan may instead put
  counter logic in every slice.
- A synchronous counter reset.
- The value of the leading/trailing bit.
- All rules of pair mode, the pending registers and the overflow/unpaired
  flags.
- The FIFO depth of 8.
- Fixed-priority arbitration.
- The serial framing, and 320 Mbps as double data rate on the 160 MHz clock.
- The encoding of the four impossible fine codes, as 0 with a flag.

## Testbenches

Each module has a self-checking testbench `tb/tb_<module>.sv`. Every
testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. They
share these helpers:

- `tdc_clkgen`: the four clock phases and the 160 MHz clock, with an
  optional shift of the 180° phase.
- `tdc_ref_pkg`: a reference model. It computes the clock levels at the hit
  time, applies the table, counts edges for CNT1/CNT2 and picks one of them.
- `tdc_deser`: a serial receiver.

| testbench | what it shows |
|---|---|
| `tb_tdc_fine_encoder` | all 16 codes against the table |
| `tb_tdc_fine_sampler` | random hits give the ideal code of their quarter |
| `tb_tdc_coarse_counter` | counter values in each half period through a full wrap |
| `tb_tdc_coarse_capture` | CNT2 for fine 0–1, CNT1 for 2–3, held after the hit |
| `tb_tdc_slice` | 600 hits with the 180° phase 80 ps early; exact match with the model, within one bin of the true time, 3–4 cycle latency |
| `tb_tdc_channel` | both edges of pulses 1 ns to 300 ns wide |
| `tb_tdc_edge_pairing` | directed cases of both modes, full FIFO, overflow |
| `tb_tdc_fifo`, `tb_tdc_readout_arbiter` | against queue models; priority order |
| `tb_tdc_serializer` | words and cycles per word at both rates |
| `tb_tdc_channel_logic` | 24 channels, both ports; lost edges equal reported ones |
| `tb_tdc_asic_top` | full-size chip, end to end (see below) |

`tb_tdc_asic_top` runs the chip at its default size for about 140 µs of
simulated time. It goes through three phases:

1. Edge mode at 320 Mbps.
2. Pair mode at 160 Mbps. One channel is enabled in the middle of a pulse
   and another is disabled.
3. A burst beyond the bandwidth of port 0.

The coarse counter wraps during the run. The testbench checks every word
received against the reference model. It also counts each mechanism and
fails if any count is zero: both modes, both rates, corrected codes, counter
wrap, port contention, FIFO overflow and unpaired edges.

## Test-board measurements in simulation

Two more testbenches repeat the measurements that were made on the real chip.
Both run the full-size chip.

- `tb_tdc_code_density` is a code-density test. It sends 38,400 edges at
  random times over all 48 slices, with the 180° clock 60 ps early. With
  random hits, the share of hits in a bin equals the bin's width. The test
  finds bins 0 and 2 about 60 ps wider than 781.25 ps, and bins 1 and 3
  about 60 ps narrower. That is the differential non-linearity which such a
  clock asymmetry should cause. The corrected codes `0111` and `1000` each
  take about 60 ps of the period. Every bin stays within the one-bin error
  bound.
- `tb_tdc_cable_delay` is a cable-delay test, read through the serial ports.
  Two channels get edges a fixed delay apart, at random phase to the clock.
  For a delay of (n + f) bins, a pure quantiser gives n + 1 with probability
  f, which makes the RMS of the difference sqrt(f(1 − f)) bins. The test
  checks the mean and the RMS for delays of 0.5 ps, 401.16 ps and 1.5 bins.
  At 401.16 ps the single-channel precision, the RMS divided by √2, comes
  out at 276 ps. This is pure quantisation, since the simulated clocks are
  ideal.

## Running a simulation

To simulate, for example, the top:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tdc_pkg.sv tb/tdc_ref_pkg.sv \
    tb/tb_tdc_asic_top.sv --top-module tb_tdc_asic_top
./obj_dir/Vtb_tdc_asic_top
```

Testbenches that do not use the reference model can leave out
`tb/tdc_ref_pkg.sv`. The testbenches use a 10 fs time precision so that the
781.25 ps phase steps are exact. They place hits off the clock edges, since
a two-state simulator cannot show metastability. The effect of metastability
on the codes is reproduced instead by shifting the 180° phase.
