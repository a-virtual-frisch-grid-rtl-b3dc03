# Readout firmware for a 3 × 3 CZT virtual Frisch-grid bar detector

A virtual Frisch-grid detector is a bar of CdZnTe with a cathode, an anode and
four side pads near the anode. A gamma photon deposits charge that drifts to the
anode. The anode pulse height measures the energy. The four pad pulses, compared
with one another, say where in the bar's cross-section the photon hit. This
firmware reads nine such bars, arranged 3 × 3, through a 32-channel
charge-amplifier chip and two 16-channel 14-bit serial ADCs. For every gamma
event it produces one record: the bar, a timestamp, the anode peak, the four pad
values and a noise sample taken just before the pulse. The host turns these
records into energy spectra and sub-pixel positions.

Pads sit between bars, so neighbouring bars share them. The nine bars then need
29 signals (9 anodes and 20 pads), which leaves three spare channels. Processing
is point by point: every channel is filtered sample by sample as it arrives,
with no waveform buffering, and every setting can be changed while running.

```
 34 serial lanes ─► adc_interface ─► 32 × [decimator ─► dc_estimator ─► convolver] ─┐
 (32 data, 2 frame)  delay, bit-slip      integrate n,   baseline,       32-tap       │
                                          drop LSBs      on/off          window       │
                                                                                      ▼
                        channel map ─► 9 × crystal_trigger (anode peak/valley, noise, pads)
                                                 │
                                          event_packer ─► sync_fifo (DMA) ─► dma_* port
 one channel, raw / decimated / convolved ─► snippet_streamer ─► sync_fifo ─► strm_* port
 ctrl_regs (host register bus)     i2c_master (front-end chip, ADCs, power devices)
```

Everything runs in one clock domain. The top is `czt_dsp_top`. Shared types,
sizes and the register map are in `czt_pkg`.

## ADC receiver (`adc_interface`, `adc_lane_deser`)

Each ADC sends one data lane per channel and a frame lane. The frame lane is
high for the first 7 bits of each 14-bit word and low for the last 7. Bits
arrive MSB first, one per clock.

- **Delay.** Each of the 34 lanes has its own delay line of 0 to 15 whole bits.
  It is used to line the data lanes up with their frame lane when the board
  skews them. The delay is written through `R_ADC_DLY`.
- **Bit slip.** Each ADC has an aligner. It compares every deserialised frame
  word with the expected pattern. On a mismatch it holds the bit counter of all
  16 lanes of that ADC for one bit, which moves the word boundary by one bit, and
  then waits two words. After four good frame words in a row the ADC is marked
  `aligned`. `slip_count` (register ADC_SLIP) records how many slips were
  needed. A mismatch after lock starts the search again.
- **Format.** Words are taken as offset binary and turned into two's
  complement by inverting the MSB. All 32 samples are handed on together with one
  `sample_valid` strobe per ADC frame (every 14 clocks), timed from ADC 0.

Delay only lines up bits within a lane. It cannot fix a lane that is a whole
word late.

## Decimation (`decimator`)

The decimator integrates and dumps. It adds `n` samples (1 to 127; 0 acts as 1)
and emits one value per `n` inputs, registered one clock after the n-th input.
The sum is then shifted right by `lsb_drop` bits and saturated to 16 bits. The
integration is the low-pass filter. The shift keeps the sample width fixed,
whatever `n` is. For a flat input `L`, choosing `lsb_drop = log2(n)` gives back
`L`.

## Baseline estimation (`dc_estimator`)

The convolver subtracts a baseline from every sample before filtering. If the
baseline followed the pulses, it would eat part of the amplitude. So the
estimator keeps two exponential averages, the mean and the variance, each with a
time constant of 2^k samples and 8 fraction bits. It uses them to decide which
samples to learn from:

- A sample whose squared distance from the mean exceeds `variance · 2^thr` (and
  an absolute floor of 16) is an *outlier*. That means a pulse or a noise burst.
- An outlier freezes both averages. The freeze lasts `holdoff` samples after
  the last outlier, so the tail of a pulse is not learned either.
- After reset, when the block is switched on, and after 1023 frozen samples in
  a row (the baseline has genuinely moved), the estimator *re-acquires*: for
  16 · 2^k samples it accepts every sample. This lets the variance grow to the
  true noise level before outliers are judged.

Switched off (`dc_en` = 0), the estimate output is 0 and the convolver sees the
raw decimated values. `hold` and `variance` are brought out for debugging. The
top leaves them unconnected.

A slow baseline drift is followed. A step larger than about `2^(thr/2)` noise
standard deviations is seen as a pulse until the 1023-sample re-acquisition
catches it.

## Window convolution (`convolver`)

Each channel has a 32-sample shift buffer of (sample − baseline) and its own
32 signed 8-bit coefficients. Every new decimated sample shifts in. The output is
the full dot product, computed with 32 parallel multipliers and registered twice,
so it appears 2 clocks after the input strobe.

The coefficients reset to all ones, a rectangular window. With a rectangular
window the output is the sum of the last 32 decimated samples. For a shaped
pulse shorter than the window, the output peak is the pulse area, which is what
measures the charge. A flat step of height `h` gives a ramp to `32·h`. A pulse
longer than the window is cut off, which limits the energy range. A longer
decimation (larger `n`) shortens the pulse in samples, at some cost in noise. Coefficient writes go to `R_COEF_BASE + 32·channel + tap` and take
effect on the next sample. A window can therefore be changed per channel while
running: anodes and pads may use different shapes.

## Bar triggers (`crystal_trigger`)

There is one trigger per bar. The bar-to-channel map (`R_MAP_BASE + bar`: anode,
P1, P2, P3, P4, five bits each) picks its anode and pads from the 32 convolved
channels. By default bar `c` uses anode channel `c` and pads `9+2c … 12+2c`, so
neighbours share two pads. The hardware does not depend on this map.

On each convolved sample the trigger works on `a` = anode, or −anode when the bar
is in valley mode (`R_TRIG_BASE + bar`, bit 31).

1. **Idle / search.** While `run` is set, the trigger waits for `a` to rise above
   the bar's level. At that crossing it saves the noise value: the sample
   `noise_back + 1` samples before the crossing, from a 32-sample history. It
   also starts following the maximum of `a`, recording the timestamp where it
   occurred.
2. **Peak.** The first sample that is not larger than the maximum ends the
   search. The peak is the maximum (sign restored in valley mode).
3. **Pad latch.** The four pad values are taken on that same sample if
   `pad_delay` = 0, or `pad_delay` samples later. Pads of a given bar peak at a
   different time than its anode, depending on depth and position, so this delay
   is the knob that makes their ratios meaningful.
4. **Re-arm.** The trigger waits until `a` falls back to the level or below,
   then re-arms.

The finished event waits in a one-entry slot until the packer takes it. If a new
event completes while the slot is still full, it is dropped and `drop` pulses.
The lost events are counted in `R_EV_DROP`. Pile-up within one pulse is not
separated: the first local maximum above the level is the peak.

All nine triggers step on the strobe of channel 0. The channels run in
lock-step, so every channel's sample of the same instant is seen together.

## Event records and the DMA FIFO (`event_packer`, `sync_fifo`)

The packer serves the bars round-robin, starting after the bar served last. Each
event becomes eight 32-bit words, written one per clock into a 1024-word
first-word-fall-through FIFO. The host reads the FIFO with `dma_valid` /
`dma_ready`.

| word | contents |
|------|----------|
| 0 | `E5` marker [31:24], 0 [23:20], bar index [19:16], 16-bit sequence number [15:0] |
| 1 | timestamp of the anode peak (clock count) |
| 2 | anode peak, signed |
| 3–6 | pads P1–P4, signed |
| 7 | noise sample, signed |

Words 2–6 are the five values a position-sensitive event needs. The noise word
gives, event by event, the electronic noise contribution to the spectrum. The
sequence number lets the host see lost records.

If the FIFO is full, the packer waits, in the middle of a record if need be,
and goes on where it stopped once there is room. Records are never cut or
interleaved. Meanwhile the bars hold their pending events, and new events on
those bars are dropped. The status register shows the FIFO level and a sticky overflow flag,
which is set when a word was offered while the FIFO was full. 1024 words hold
128 events.

## Channel stream (`snippet_streamer`)

One channel is selected (`R_STREAM`: channel, and stage raw / decimated /
convolved). It can be sent to the host in two ways:

- **Continuous.** Every sample of that channel at that stage goes out. A sample
  the stream FIFO cannot take is counted in `R_STRM_LOST`.
- **Snippets.** Samples are recorded into a 1024-word ring. An upward crossing of
  `R_STRM_LVL` starts a snippet. The streamer records `post` more samples, then
  sends a header `{5A, 00, length}` followed by the `pre` samples before the
  crossing, the crossing sample and the `post` samples after it. Recording stops
  while a snippet is being sent. `pre + post` is limited to 1023.

The stream has its own 1024-word FIFO and port (`strm_*`). It never blocks the
event path.

## I2C master (`i2c_master`)

The I2C master sets up the charge-amplifier chip, the ADCs and the power
devices. One transaction is START, address + R/W, 1 to 4 data bytes, then STOP.
Byte 0 is in bits [7:0]. The SCL period is `4 · (div + 1)` clocks. A NACK on a
write aborts the transfer with STOP and sets the `nack` status bit. On a read
the master acknowledges every byte except the last. The pins are open drain:
`scl_oe` / `sda_oe` pull the line low. Clock stretching is not supported.

## Register map (`ctrl_regs`)

The bus uses word addresses with 12 bits. A write happens on the clock edge
where `reg_we` is high. Reads are combinational.

| addr | name | fields |
|------|------|--------|
| 0x000 | CTRL | [0] run, [1] DC estimation on, [2] stream on, [3] snippet mode, [4] clear counters (write) |
| 0x001 | STATUS | [0] both ADCs aligned, [1] I2C busy, [2] I2C NACK, [3] FIFO overflow seen, [31:16] DMA FIFO level |
| 0x002 | DECIM | [6:0] n, [11:8] LSBs dropped |
| 0x003 | DC | [3:0] k, [7:4] outlier threshold shift, [15:8] hold-off |
| 0x004 | PEAK | [7:0] pad latch delay, [12:8] noise sample distance |
| 0x005 | STREAM | [4:0] channel, [9:8] stage (0 raw, 1 decimated, 2 convolved), [17:10] pre samples |
| 0x006 | STRM_LVL | snippet trigger level |
| 0x007 | STRM_POST | [11:0] post samples |
| 0x008 | ADC_DLY | write: [13:8] lane (32, 33 = frame lanes), [3:0] delay |
| 0x009 | I2C_CTRL | [0] start, [1] read, [3:2] bytes − 1, [14:8] address, [31:16] divider |
| 0x00A | I2C_WDATA | bytes to write |
| 0x00B | I2C_RDATA | bytes read |
| 0x00C | EV_COUNT | events packed since the last clear |
| 0x00D | EV_DROP | events lost since the last clear |
| 0x00E | STRM_LOST | stream samples lost |
| 0x00F | ADC_SLIP | [15:0] bit slips made on ADC 0, [31:16] on ADC 1 |
| 0x010 | SNIPPETS | snippets sent |
| 0x011 | ARMED | bit *c* set while bar *c* is following a pulse |
| 0x040 + bar | TRIG | [30:0] trigger level, [31] valley mode |
| 0x080 + bar | MAP | anode [4:0], P1 [9:5], P2 [14:10], P3 [19:15], P4 [24:20] |
| 0x400 + 32·ch + tap | COEF | window coefficient, 8-bit signed (write only) |

Reset state:

- acquisition stopped, DC estimation on;
- n = 4 with 2 LSBs dropped;
- k = 6, threshold shift 4, hold-off 64;
- pad delay 0, noise distance 16;
- all trigger levels 1000;
- rectangular windows;
- default map.

## Timing, rates and sizes

- **Receiver rate.** The receiver takes one serial bit per clock, so an ADC
  frame takes 14 clocks. The real ADCs run at 50 MS/s. That is 700 Mbit/s per
  lane, or 22.4 Gbit/s for all 32 channels. In this design that would mean a
  700 MHz fabric clock. At a practical clock (for example 100 MHz) the design
  handles 7.1 MS/s per channel. Reaching the full rate needs a DDR/SERDES front
  end in place of `adc_lane_deser`; everything after `sample_valid` is
  unaffected.
- **Latency.** Latency from the last bit of an ADC word to its convolved value
  is 1 (receiver) + 1 (decimator, on the n-th sample) + 2 (convolver) clocks.
  The baseline used is the estimate as it stood one decimated sample earlier.
- **Widths.** The worst-case convolution growth is a 16-bit sample × 8-bit
  coefficient × 32 taps = 29 bits, which fits the 32-bit result. A large `n` with
  too few LSBs dropped saturates at the 16-bit decimated sample, so it clips
  rather than wraps.
- **Event path.** One event takes 8 clocks in the packer. Each bar holds one
  pending event, and the DMA FIFO holds 128 events.
- **Size.** After coarse synthesis the whole design has about 7,800 word-level
  cells, 47 k flip-flop bits (the 32 × 32-sample convolution buffers dominate)
  and 96 kbit of memory in three 1024 × 32 arrays.

## Where this departs from, or goes beyond, the published design

The published design fixes the processing order, the 32-tap per-channel
window, the switchable baseline block, peak/valley detection with a pad latch
delay, the five-value DMA record, the single-channel raw/snippet stream, and an
I2C master with programmable clock and byte count. It gives only the functions
of these blocks. Their insides here are the simplest choices that do those
functions:

- an exponential-average baseline with outlier freeze;
- a first-maximum peak rule;
- a noise value taken from a fixed history;
- round-robin packing;
- a level-crossing snippet trigger;
- a four-phase I2C bit engine.

Choices made in this design and not published:

- the record format beyond the five values (header, timestamp, noise word);
- the register map and reset values;
- the channel map;
- coefficient width;
- FIFO depths;
- the frame-pattern alignment method.

Not covered here:

- the serial link at full speed (see the receiver rate above);
- generation of the ADC sample clock: the ADCs can be run at up to 65 MHz,
  but here the ADC is simply assumed to send one bit per fabric clock;
- the DMA engine and host memory;
- spectra, sub-pixel position and 3000-point histograms, which are computed by
  the host;
- the analog chip, ADCs, bias supply and crystals.

The ports `dma_*`, `strm_*`, `reg_*` and the I2C pins are where those parts
attach.

A few outputs are left open in the top on purpose: the estimator's
`variance` and `hold`, and the stream FIFO's level and overflow. They are there
for debugging in simulation, and lint reports them as unused. The bit-slip
counts, the snippet count and the armed bars can be read from registers.

## Simulation

Every block has a self-checking testbench in `tb/`, named `tb_<block>`. Each
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
testbench support models are:

- `adc_serial_model`: two ADCs with lane skew, an unknown word phase, and either
  counting test words or settable analog levels;
- `i2c_target_model`: an I2C target with a fixed address.

Build and run any of them with verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/czt_pkg.sv rtl/*.sv tb/adc_serial_model.sv tb/i2c_target_model.sv \
    tb/tb_czt_dsp_top.sv --top-module tb_czt_dsp_top -Mdir obj
./obj/Vtb_czt_dsp_top
```

`tb_czt_dsp_top` runs the whole firmware at its default sizes, driven only
through the register bus and the serial lanes. The sequence is:

1. It sets lane delays and waits for bit-slip alignment.
2. It checks a raw stream against the model's levels.
3. It checks the convolved stream with baseline removal on (near 0) and off
   (32 × level).
4. It fires each bar with known anode and pad heights and checks each record:
   - bar index, anode (32 × height, or 64 × for a bar given a window of 2s);
   - pads (which depend on the latch delay) and the noise value;
   - one bar runs in valley mode.
5. It captures a snippet.
6. It holds the DMA port until the FIFO fills and events are lost, then drains
   it and accounts for every event.
7. It writes and reads over I2C.

It counts each of these mechanisms and fails if any never happened. It runs in
about a second.

The sizes in `czt_pkg` (channels, bars, taps, widths) and the FIFO depths on
`czt_dsp_top` are parameters. The register map assumes at most 32 channels,
16 bars and 32 taps.
