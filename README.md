# A 2048-channel MKID readout in programmable logic

A Microwave Kinetic Inductance Detector (MKID) is a superconducting
resonator. Thousands of them hang off a single microwave line, each tuned to
its own frequency. The readout sends a comb of tones down the line, one tone
per resonator, and measures each returning tone. When a photon hits a pixel,
that resonator's frequency and quality factor shift for some tens of
microseconds. The phase of its tone swings by an amount that grows with the
photon's energy. So the readout has to turn a few GHz of sampled waveform
into 2048 phase time streams, one per pixel. It then watches every stream
for pulses and reports each photon as a record {arrival time, pixel, pulse
height}.

This RTL covers everything between the data converters and the processor
that runs on a 512 MHz clock in the FPGA fabric:

```
 DAC table ──► DAC I/Q                            (waveform replay)

 OPFB bins ─► bin_select ─► ddc ─► lowpass ─► phase_cordic ─► matched_filter ─► trigger ─► photon_packager ─► processor memory
   (16/beat)  (any bin to    (tone to 0 Hz,  (1 MHz     (atan2)        (30 taps per       (threshold,    (two buffers,
              any channel)    loop centred)   channels)                 channel)          holdoff, min)   swap on full/interval)
                                   │                                     │        │
                                   │                                     │        └─ trigger strobes ─► postage_capture ─► processor memory
                                   ├────────── fine-channel IQ ──────────┼───────────────────────────────► (IQ snapshots)
                                   ▼                                     ▼
                               filter_iq                            filter_phase      raw ADC I/Q
                                   └───────────────► capture_switch ◄────┘◄────────────────┘
                                                          │ 256 bit @ 512 MHz
                                                     capture_fifo (dual clock, 256 → 512 bit)
                                                          │ 512 bit @ 256 MHz
                                                       axis2mm ─► AXI4 bursts to the PL DRAM
 timestamps (36-bit µs, PPS aligned) ─► trigger, postage_capture
 axil_cfg (AXI4-Lite) ─► configuration writes to every block, status reads
```

The polyphase filter bank (OPFB) that splits the band into 4096
overlapping 2 MHz bins, the data converters, the processor and the DRAM
controllers are not part of this RTL. Their streams are ports of
`mkidgen3_top`.

## How the streams are organised

Everything after the filter bank is one big time-multiplexed pipeline.
There is no per-channel hardware. Each block processes 8 channels per clock
and keeps per-channel state in memories indexed by the beat number.

* **Beat, frame, channel.** A *frame* is 256 beats. In beat `g`, lane `l`
  carries channel `c = 8g + l`. The filter bank delivers 16 bins per beat, so
  bin `b` arrives in beat `b / 16` on lane `b % 16`. One frame is one sample
  of every bin: 2 MHz per channel at 512 MHz. After the low-pass only every
  other frame is valid, so each channel gets one sample per microsecond.
* **Handshake.** Streams carry `valid` and `last` (last beat of a frame) and
  no `ready`. The pipeline never stalls. The only places that can hold data
  back are the memory-facing ports (`mem_ready`, the AXI4 ports). Each has
  its own queue and a drop counter or overflow flag.
* **Samples.** `mkid_pkg::iq_t` is a packed complex sample
  `{q[31:16], i[15:0]}`, both signed 16-bit. A phase is signed 16-bit with
  2^-13 rad per LSB, so the range is ±π.
* **Photon record.** `mkid_pkg::photon_t` is 64 bits:
  `{ts[63:28] (µs), channel[27:16], phase[15:0]}`.
* **Reset.** All resets are synchronous and active high. Large per-channel
  memories are also given initial contents (maps, unity filter, thresholds)
  so that a design without a reset pulse still starts in a defined state.

## Channel path

### Bin selection (`bin_select`)

Tones are not evenly spaced, so some bins hold two resonators and others
none. The 2048 channel slots therefore take their bins through a fully
programmable map. The hard part is that 8 lanes must read 8 arbitrary bins
in every cycle. The block solves this by writing each incoming frame into 8
private copies, one per output lane. Each copy is double-buffered: the
current frame is written into one bank while the previous one is read from
the other. Any number of channels may read the same bin, up to all 2048.
The output therefore lags the input by one frame. Before the map is
programmed, channel `c` reads bin `2c`, which is where a comb with one tone
in every other bin puts its tones.

### Down-conversion and loop centring (`ddc`)

Each channel still has its tone somewhere within ±1 MHz of the bin centre.
For every channel the DDC keeps a 16-bit phase accumulator. It advances by
the channel's increment once per frame (`inc = f_offset / 2 MHz · 65536`).
The block multiplies the sample by `exp(-j(acc + offset))` and subtracts a
complex centre:

```
y = x · exp(-j(acc + offset)) − centre
```

The tone moves to 0 Hz. The per-channel phase offset rotates the
resonator's IQ loop, and the centre subtraction moves the loop's centre to
the origin. After this, a photon shows up as a change of angle around 0.
cos/sin come from a 1024-entry table (sin is cos a quarter turn earlier).
Products are truncated. Latency is 3 cycles.

### Low-pass and decimation (`lowpass`, built on `mc_fir`)

Neighbouring bins overlap by half, so a channel can still contain the
adjacent resonator's tone at about ±1 MHz. `lowpass` filters I and Q with a
16-tap, Hamming-windowed sinc (cutoff 0.5 MHz, unity DC gain, Q1.15). It
keeps every other sample.

`mc_fir` is the reusable engine. It also serves the matched filter, and it
is the least obvious part of the design. A channel's next sample comes only
one frame later, so the filter cannot keep a shift register per channel.
Instead it keeps, for every channel, its last `TAPS-1` samples in a history
memory, indexed by beat and split by lane. When a channel's sample arrives:

1. its history is read;
2. the full window `{new sample, history}` is multiplied by the coefficients
   and summed (`TAPS` multipliers per lane);
3. the shifted window is written back.

Stage 1 and the write-back happen in the same cycle, at the same address.
Beats of one frame touch different addresses, so there is no hazard. With
`DECIM = 2` the history still moves every frame, but an output is flagged
valid only on even frames. Latency is 2 cycles.

### Phase (`phase_cordic`)

`atan2(Q, I)` comes from a pipelined vectoring CORDIC, one pipeline per
lane, with 16 iterations. The first stage folds the left half-plane onto
the right by negating the vector and starting the angle at ±π. The inputs
are widened by 8 guard bits so that small vectors still get an accurate
angle. Over the full circle the result agrees with `atan2` within 2 LSB
(2.4·10⁻⁴ rad), and within 8 LSB for vectors shorter than 64 counts. A zero
vector gives an arbitrary angle. Latency is 18 cycles.

### Matched filter (`matched_filter`)

The matched filter is a per-channel 30-tap FIR on the phase (`mc_fir` with
`PER_CHAN = 1`). Coefficients are signed 16-bit with 1.0 = 2^14, and the
output saturates. Software derives each pixel's filter from its average
pulse and its noise spectrum, then loads it at run time. The power-up
default is the unity filter (tap 0 = 1.0), which passes the phase through
unchanged.

## Photon trigger (`trigger`)

A photon pulls the filtered phase negative. Each channel has an 8-bit
signed threshold and an 8-bit holdoff. Each channel is in one of two
states:

* **Idle.** A sample below the threshold triggers the channel. The block
  stores the current timestamp, starts the running minimum at this sample
  and loads the holdoff counter.
* **Holding off.** Each sample updates the minimum and decrements the
  counter. On the holdoff-th sample after the trigger, the block emits
  `{trigger time, channel, minimum}` and returns to idle. It can trigger
  again on the very next sample.

One threshold LSB is 2^-6 rad (0.016 rad), so the range is -2 to +1.98 rad.
The comparison is against `thr << 7` in phase units. Holdoff writes are
clamped to 8..254 samples, i.e. microseconds. Defaults are -2 rad and 8.
The block also raises a one-cycle strobe per lane on every trigger sample,
and postage capture uses it. Up to 8 photons can come out per beat, one per
lane.

## Photon buffers (`photon_packager`)

Photons go to processor memory through a double-buffer handshake:

* Records are written one per cycle at `base[cur] + 8·n`, through a
  valid/ready port. Buffers are 819200 bytes (102400 records) by default.
* A buffer is handed over (`swap_valid`, with buffer number and record
  count, also readable as status word 1) when it is full, **or** when a
  photon arrives whose time is at least `interval` µs after the buffer's
  first photon. Writing starts in the other buffer.
* The processor returns a buffer by writing its number to the release
  register once it has copied the buffer out. Both buffers start out free.
* If a swap is due but the other buffer has not been returned, the photon
  is dropped and counted (status word 0). Photons are also dropped when the
  16-beat input queue is full because the memory port stalls for too long.

Because the rule takes the time of the next photon, a quiet buffer is only
handed over when the next photon arrives.

## Postage stamps (`postage_capture`)

To tune the trigger and check pulse shapes, 16 user-chosen channels keep
the last 128 fine-channel IQ samples in ring buffers. A trigger on one of
them starts a capture. The block waits for 95 more samples of that channel,
then freezes the ring and writes an event of 128 32-bit words:

* word 0: `{ts[20:0], channel[10:0]}`;
* words 1..127: IQ samples, oldest first, about 32 before the trigger and
  95 from it on.

Event `n` is written at `base + 512·n`. After an arm command at most 8000
events are written, and further triggers are ignored. A retrigger on a
channel that is already capturing is also ignored. The IQ reaches this
block about 21 cycles before the trigger strobe of the same sample. At the
default size a sample period is 512 cycles, so the alignment is exact to
the sample.

## Calibration capture

Setting up a detector array needs long raw records: frequency sweeps and IQ
loops, phase noise spectra, and raw ADC data. These go to the 4 GiB DRAM
next to the FPGA while photon counting continues.

* `filter_phase` keeps chosen 8-channel groups of the matched-filter output
  (a 256-bit mask). It packs two 128-bit beats into one 256-bit word.
* `filter_iq` keeps chosen groups of the fine-channel IQ (256 bits per
  beat).
* The raw ADC I and Q buses are paired into 8 complex samples per beat.
* `capture_switch` selects one of the three. After a start command it
  passes exactly `len` 256-bit words and marks the last one.
* `capture_fifo` is a Gray-pointer dual-clock FIFO. It pairs words into
  512-bit entries and moves them to the 256 MHz memory clock. The rates
  match: 256 bit × 512 MHz = 512 bit × 256 MHz. A word that meets a full
  FIFO is lost and sets a sticky `overflow`.
* `axis2mm` writes `ceil(len/2)` entries as AXI4 INCR bursts of up to 16
  × 64 bytes. It starts a burst only when the FIFO already holds it, keeps
  one burst in flight and reports `done` or `err`.

To keep up with an unthrottled source, the DRAM must accept write beats
back to back. If it cannot, `overflow` says so.

## Waveform replay and time

`dac_replay` holds the readout comb as 2^19 complex samples (2 MiB). That
gives a 4.096 GS/s / 2^19 = 7.8125 kHz tone grid. The table is split into 8
banks so that one beat reads 8 consecutive samples. It loops over a
programmable number of beats, by default the whole table.

`timestamps` divides the clock down to 1 µs and counts in 36 bits, which
wraps after 19.1 hours. In PPS mode the processor writes the UTC second
that the next GPS pulse-per-second edge will start. The edge then loads
`second · 10^6`, so every board tags photons on the same UTC-based time
base. The counter can also run free or be loaded directly.

## Control map

The processor reaches every block through the AXI4-Lite slave `axil_cfg`.
Byte address bits [25:22] select the block (`mkid_pkg::blk_e`). Bits [21:2]
are the word inside it. Reads return status words selected by the low
address bits.

| block | word address | meaning |
|---|---|---|
| 0 DAC | bit19=0: sample index | `{Q, I}` table sample |
| | 0x80000 / 0x80001 | run bit / loop length in beats (0 = all) |
| 1 BINSEL | channel | bin number |
| 2 DDC | `sel<<11 \| channel` | sel 0 increment, 1 phase offset, 2 centre `{Q, I}` |
| 3 MF | `channel<<5 \| tap` | coefficient (1.0 = 16384) |
| 4 TRIG | channel | `{holdoff[15:8], threshold[7:0]}` |
| 5 TIME | 0 / 1 / 2 / 3 | mode (1 = PPS) / next UTC second / load low / load high and apply |
| 6 PHOT | 0..4 | enable / interval µs / base 0 / base 1 / release buffer |
| 7 POST | 0..15 / 16 / 17 | watched channel (bit 31 enable) / base / arm |
| 8 CAP | 0 / 1 / 2 / 3 | source (0 phase, 1 IQ, 2 ADC) / length in 256-bit words / start / DRAM base |
| | 16..23, 24 / 32..39 | phase-group mask, clear half word / IQ-group mask |

Status words: 0 photons dropped, 1 last swap `{count[31:1], buffer[0]}`,
2 postage events, 3 `{pps_seen, overflow, err, done, busy}`, 4/5
timestamp low/high, 6 current photon buffer.

## Where this departs from the original system

* In the original system the filter bank, the low-pass/decimator, the phase
  CORDIC and the AXI-stream-to-memory bridge are vendor or third-party
  cores. Here the filter bank stays outside. The others are written
  directly: a windowed-sinc low-pass whose taps are this design's, a
  vectoring CORDIC, and a minimal burst writer.
* The system diagram shows a 40-bit timestamp bus. The prose specifies a
  36-bit UTC-based microsecond count, and this RTL uses 36 bits.
* The same diagram draws the IQ for capture from the DDC output. Here the
  DDC excludes the low-pass, so IQ for capture and postage stamps is taken
  after it, at 1 MHz.
* The diagram's buses from trigger to photon packager (256 bits) and to
  postage capture (192 bits) are replaced by per-lane 64-bit photon records
  and per-lane trigger strobes.
* All of these are this design's choices: the threshold LSB, the photon
  record layout, the postage header and pre-trigger split, the DDC widths,
  the register map, and the capture length/start control. Widths and
  encodings not fixed elsewhere were chosen to be simple and wide enough.
* Only two time-keeping modes are built, free-running and PPS-aligned.

## Simulating

Each block has a self-checking testbench in `tb/`, named `tb_<module>`.
Each prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mkid_pkg.sv \
          $(ls rtl/*.sv | grep -v mkid_pkg) tb/tb_trigger.sv --top-module tb_trigger -o sim
obj_dir/sim
```

(The package must be read first.) The
testbenches compare against independent models: `atan2` and cos/sin in
real arithmetic, a behavioural trigger, the two-buffer rule photon by
photon, and memory and AXI models that store what is written. Several run
at reduced channel counts through parameters. `tb_bin_select` and `tb_ddc`
run at the full 2048 channels.

Two testbenches cover the whole design, and they share
`tb/tb_mkidgen3_body.svh`:

* `tb_mkidgen3_top` runs 64 channels with 16-record photon buffers.
* `tb_mkidgen3_full` runs the top with every parameter at its default
  (2048 channels, 2^19-sample DAC table, 800 KiB buffers). It takes about
  20 s.

Both generate filter-bank output with tones and photon-like phase steps on
a few channels. A processor model configures the design over AXI4-Lite.
The tests check:

* the PPS alignment;
* the DAC loop;
* every photon's channel, pulse height and spacing;
* bin duplication (a remapped channel sees another channel's pulses at the
  same time);
* the matched-filter gain of one channel;
* buffer swaps and drops, with the books balanced (photons written +
  dropped = photons triggered);
* a postage stamp;
* one capture of each source to a DRAM model.

Each mechanism is counted, and the test fails if one never happens. Only
the full-size run skips the full-buffer swap, which would need 102400
photons.

## Sizes

All defaults are the original system's sizes: 2048 channels, 4096 bins,
2^19-sample DAC table, 30-tap filters, 16 postage channels × 127 samples ×
8000 events, and 800 KiB photon buffers. In the per-channel memories
(history, coefficients, DDC accumulators, trigger state, bin copies) the
only parallel dimension is the 8 lanes. Each memory is otherwise indexed by
the beat, so it maps onto block or ultra RAM.
