# MEXART digitiser FPGA: channelised streaming of 16 antenna signals

MEXART is a 140 MHz interplanetary-scintillation radio telescope. Its digital
back end digitises 64 row signals of the array. Two Tile Processing Modules do
this work, each with two FPGAs. The server then beamforms and correlates the
data on a GPU. The firmware in this repository is what runs in one of those
FPGAs.

It takes 16 real sample streams at 100 MSPS. It cuts them into timestamped
frames of 4096 samples and splits every frame into 2048 channels of
24.4 kHz. It keeps a host-chosen window of 512 channels, which is 12.5 MHz
of band, and requantises each channel to 8+8-bit complex values. The result
leaves as SPEAD packets. A second, low-rate packet stream carries integrated
power spectra. Around this path sit the diagnostics: an RMS power meter, an
ADC snapshot buffer and a register bank for control and status.

Four copies of `mexart_fpga_top` cover all 64 signals. The `FIRST_ANT`
parameter is 0, 16, 32 or 48 and names the first input of each copy. It is
written into every packet header, so the server knows which inputs a packet
holds.

```
 adc_data[16] ─► timing_unit ─┬─► channelizer ─► channel_select ─┬─► spead_formatter (data) ───┐
     pps ─────────►│          │  (pfb_fir + fft_sdf + reorder)   │                              ├─► packet_mux ─► eth_word
                   │          │                                  └─► power_spectra_generator ─► spead_formatter (spectra)┘
                   │          ├─► rms_power_meter
                   │          └─► adc_snapshot
 reg bus ◄────────► register_bank  (settings to every block, counters and readings back)
```

The AD9680 converters, the JESD204B receiver and the 10G UDP/Ethernet core
are not included. The top connects to them through plain ports:
`adc_valid`/`adc_data` on one side and `eth_word`/`eth_valid`/`eth_ready` on
the other.

## One clock, one sample per cycle

A single clock runs everything, at the sample rate: 100 MHz for 100 MSPS.
On each cycle with `adc_valid` high, every block handles one sample of all 16
inputs at once, in parallel lanes. Every block advances only on valid input,
so an ADC link that pauses simply stretches the frames. Both the channeliser
and the channel select give out at most one word per input cycle. So at the
default settings the 64-bit packet port is never asked for more than it can
carry (see *Link budget*).

## Frames and timestamps (`timing_unit`)

Samples carry no time until the host synchronises the design:

1. Write the UNIX second of the next PPS edge to `EPOCH`.
2. Set `CONTROL.arm`.

The PPS input passes through a two-flop synchroniser. The first rising edge
after arming starts the frames: the sample that arrives with the detected
edge becomes sample 0 of frame 0. Frames then run freely, 4096 samples each.

Each PPS edge after that:
- adds one to the seconds count;
- sets the sample count within the second back to 0.

It does not cut a frame short. So a frame's timestamp is
`{seconds, sample_in_sec, frame}`, taken at the frame's first sample. The
seconds and sample offset travel with the frame to the packet headers.

Before the first sync, no valid output is produced at all.

## The channeliser

The channeliser is the largest part of the design and the one whose timing is
least obvious.

### Polyphase FIR (`pfb_fir`)

The prototype is a low-pass filter of 4 × 4096 coefficients: a
Hamming-windowed sinc with a cut-off at one channel width, in 18-bit signed
values. The coefficient ROM is filled in an `initial` block with integer
arithmetic only: `mexart_pkg` has a Q30 sine (`sin2pi_q30`, `cos2pi_q30`)
that folds the angle into one quadrant and sums a Taylor series; at the
default size every coefficient equals the one computed in double precision. The block keeps three earlier frames in a history memory, one
word per frame position that holds all 16 lanes. At frame position `n`:

```
y[n] = Σ_{t=0..3} h[(3-t)·4096 + n] · x_t[n]     (x_0 = current frame, x_3 = oldest)
```

The sum is rounded and scaled back by 2^17, which gives an 18-bit output.
Latency is one cycle. The first three frames after start-up use a history of
random contents. Nothing downstream depends on them.

### Streaming FFT (`fft_sdf`, `fft_sdf_stage`)

The FFT is a radix-2 decimation-in-frequency design with a single-path delay
feedback structure: 12 stages for 4096 points. Stage `s` has a feedback
memory of `D = 4096 >> (s+1)` words. While the first half of a block of
`2D` samples arrives, it is stored, and the differences of the previous
block leave through the twiddle multiplier. While the second half arrives,
the sums leave directly and the new differences are stored. Each stage
delays the stream by `D` samples and one register. The whole transform
therefore has a latency of `4095 + 12` input cycles and needs one complex
multiplier per stage per lane.

There is no scaling inside the transform. The word grows from 18 to 31 bits,
which is enough for the full 2^12 gain plus the real/imaginary sum. So the
FFT cannot overflow for any input. Twiddles are Q2.16 values. The output comes
out in bit-reversed order.

### Real input and reordering (`channelizer`)

The samples are real, so bins 2048..4095 mirror bins 0..2047. Only the lower
half is kept, which gives 2048 channels of 100 MHz / 4096 = 24.4 kHz. In
bit-reversed order, the kept bins are exactly the outputs at even positions.

A reorder memory has two banks of 2048 words each:
- During one frame, output position `j` (when even) writes bin `bitrev(j)`
  into one bank.
- During the next frame, each odd position `j` reads channel `j >> 1` from
  the other bank.

So the channels leave in natural order, **one channel every second input
sample**, spread evenly over the frame instead of in a burst. This halves the
peak rate that everything downstream must handle.

The timestamp of each frame goes into a 4-entry FIFO at the input side. It is
read when that frame's channel 0 leaves, about two frames later. Outputs are
`out_chan` (0..2047), `out_sof` (channel 0), `out_ts` and 31-bit
`out_re`/`out_im` for every lane.

## Channel window and requantisation (`channel_select`)

`CHAN_START` picks the first of 512 contiguous channels. The value is clamped
to 0..1536 so that the window stays inside the band. The reset value is 768,
which centres the window. Each kept 31-bit component is reduced to 8 bits as
follows:

```
q = (v + 2^(shift-1)) >>> shift          (shift = 0: no rounding term)
q = clamp(q, -127, +127)                 saturation counted in sat_count
```

`SHIFT` sets the gain. Its reset value is 12, which takes out the FFT's
2^12 growth. Saturation is symmetric (never -128), so the power of a
saturated value does not depend on its sign. Latency is one cycle.

## Integrated spectra (`power_spectra_generator`)

For every kept channel and input, the block sums `re² + im²` over
`INT_FRAMES` frames (reset value 1024, about 42 ms). One memory word per
channel holds all 16 running sums, each 32 bits. The memory is reused across
integrations without a separate clear pass:

- **First frame of an integration:** the product overwrites the stored sum.
- **Middle frames:** the product is added to the stored sum.
- **Last frame:** the finished sum is sent out instead of being written back.

The integration length is latched at the start of each integration, so a
register write never splits an integration. The output carries the
timestamp of the integration's first frame.

## Packets (`spead_formatter`, `packet_mux`)

Two formatter instances exist: one for channelised data (mode 1) and one for
spectra (mode 2). Each queues incoming channel words in a FIFO of 512 entries,
one channel of all inputs per entry.
When a group of CPP consecutive channels is complete, it sends one packet of
64-bit words:

| word | content |
|------|---------|
| 0 | SPEAD header `53 04 02 06 0000 0008`: magic, version 4, item-pointer width 2 bytes, heap-address width 6 bytes, 8 items |
| 1 | `0x8001` heap counter (counts packets of this stream) |
| 2 | `0x8002` heap size = payload bytes |
| 3 | `0x8003` heap offset = 0 (one packet per heap) |
| 4 | `0x8004` payload length in bytes |
| 5 | `0x9600` UNIX seconds of the frame |
| 6 | `0x9601` sample offset of the frame within that second |
| 7 | `0xA002` `{first channel[15:0], channels in packet[15:0], first input[15:0]}` |
| 8 | `0xB300` stream mode: 1 = channelised data, 2 = integrated spectra |
| 9… | payload, channel-major; within a channel, input 0 is in the most significant bits |

An item word is `{1, id[14:0], value[47:0]}`: the top bit marks the item as
immediate. The payload of the two streams differs as follows:

- **Data packets:** each input is `{re[7:0], im[7:0]}`. So a channel is 4
  words, and a packet of 32 channels is 128 payload words (1 KiB).
- **Spectra packets:** each input is one 32-bit power. So a channel is 8
  words, and a packet of 16 channels is also 128 words.

**Overflow.** If the Ethernet side stalls, a formatter drops whole groups of
CPP channels, never single channels. At the start of each group it checks
whether the FIFO has room for the whole group. If not, the group is
discarded and counted in `drop_count`. A packet therefore never holds a gap,
and the server sees the loss as a missing heap counter value.

**Merging.** `packet_mux` merges the two streams for the single Ethernet
port. Arbitration is round robin, one whole packet at a time. The grant is
locked as soon as a word is offered, and is released after the word that has
`last` set. Both the formatter and the mux follow the usual valid/ready rule:
a word that has been offered stays unchanged until it is taken. Assertions
check this rule.

### Link budget

| Stream | Words per 4096-sample frame | Share of the port |
|--------|-----------------------------|-------------------|
| Data: 512 channels / 32 per packet = 16 packets × 137 words | 2192 | 54 % |
| Spectra at `INT_FRAMES` = 1024 | 4384 per integration | far below 1 % |

This is at one word per clock. At 100 MHz the data stream is 3.2 Gb/s per
FPGA of payload-bearing traffic, and 12.8 Gb/s for all four FPGAs.

The spectra stream fits in the 1904 spare words per frame for any
`INT_FRAMES` of 3 or more. With `INT_FRAMES` = 1 or 2 the spectra exceed the
port, and the formatters drop groups.

## Diagnostics

- **`rms_power_meter`:** sums `x²` for each input over `2^RMS_WIN` samples
  (clamped to 2^5..2^24). It then returns the mean power and its integer
  square root. The root is computed bit-serially, one bit per cycle, so the
  RMS value follows the power value by 16 cycles. Both are readable at
  0x10+i (RMS) and 0x20+i (power).
- **`adc_snapshot`:** setting `CONTROL.snapshot` arms a capture. It starts at
  the next frame start and records 1024 consecutive samples of all 16 inputs.
  `STATUS` shows busy and done, and 0x30–0x32 hold the timestamp of the
  first captured sample. The samples are read through the register
  window at 0x4000: the address is `0x4000 + sample·16 + input`, and the data
  is sign-extended.

## Register map (`register_bank`)

Word-addressed, with 32-bit data. A write takes effect on the next cycle. A
read returns data with `rd_valid` one cycle after `rd`.

| addr | name | access | meaning |
|------|------|--------|---------|
| 0x0000 | ID | RO | 0x4D455841 ("MEXA") |
| 0x0001 | CONTROL | W | bit0 arm PPS sync, bit1 trigger snapshot (self-clearing) |
| 0x0002 | EPOCH | RW | seconds value given to the sync edge |
| 0x0003 | CHAN_START | RW | first selected channel (768) |
| 0x0004 | SHIFT | RW | requantisation shift (12) |
| 0x0005 | INT_FRAMES | RW | spectra integration in frames (1024) |
| 0x0006 | RMS_WIN | RW | log2 RMS window (16) |
| 0x0007 | STATUS | RO | bit0 synced, bit1 snapshot done, bit2 snapshot busy |
| 0x0008–0x000F | counters | RO | PPS edges, saturations, data packets, data drops, spectra packets, spectra drops, spectra completed, RMS windows completed |
| 0x0030–0x0032 | SNAP_TS | RO | snapshot timestamp: seconds, sample within the second, frame number |
| 0x0010+i | RMS | RO | RMS of input i |
| 0x0020+i | POWER | RO | mean power of input i |
| 0x4000+ | SNAPSHOT | RO | `{sample, input}` window |

## Where this design goes beyond its source description

The published description gives the following:
- the block diagram;
- the sample rate, frame length, channel count and window size;
- the timestamping from the epoch and the PPS;
- the existence of the diagnostics and the packet format family.

Everything below is this design's own choice and could differ in the
deployed firmware:

- **Real sampling.** The 100 MSPS stream is handled as real samples, and
  half of a 4096-point transform is kept. This is the only reading under
  which 100 MSPS, 2048 channels and 24.4 kHz agree. The down-converters of
  the ADC could also deliver complex samples. In that case the FFT would
  take complex input and keep all bins.
- **The filter bank's insides:** 4 taps, the Hamming-windowed sinc, SDF
  FFT, unscaled arithmetic, and the 18-bit coefficient and twiddle widths.
- **8-bit output samples.** These come from the quoted total data rate of
  about 12.5 Gb/s for 64 signals × 512 channels, together with the
  requantisation rule and its gain register.
- **The SPEAD packet content.** The header follows the public SPEAD-64-48
  layout. The items with IDs 0x1600, 0x1601, 0x2002 and 0x3300, the
  packet sizes and the drop policy are invented here.
- **The spectra source.** The spectra integrate the 512 requantised channels,
  as the block diagram draws the branch, rather than the full channeliser
  output.
- **The snapshot path.** The snapshot is read over the register bus, not
  sent as packets.
- **The bus and register map.** These are simple here. The real board
  reaches its registers over the control network, described by a generated
  XML file.
- **Clocking.** One clock at the sample rate is used, with no clock-domain
  crossings except the PPS synchroniser.

The ROM contents (the filter prototype and the twiddles) are computed in
`initial` blocks with integer arithmetic, so no real-valued functions are
needed. The tables are large (16,384 coefficients, 2,048 twiddles in the
first FFT stage), and a tool that evaluates `initial` blocks as constant
expressions may hit its evaluation step limit on them; FPGA flows that
infer ROMs from initialised arrays handle them directly.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against a model computed inside the testbench, checks cycle timing
where it is defined, and prints `TB_RESULT checks=N failures=M`. The checks
include:

- FFT: every bin checked against a direct DFT of the same frame at a
  reduced size (64 points), to within a rounding tolerance, and its latency;
- channeliser: tone channels and their magnitudes;
- the PFB sum;
- the requantisation corner cases;
- integration boundaries;
- packet contents word by word;
- drops under back-pressure;
- round-robin fairness;
- the snapshot alignment;
- every register.

There are two testbenches for the top:

- **`tb_mexart_fpga_top`** runs a reduced design: 4 inputs, 64-sample
  frames, 16 channels kept, small FIFOs. It drives tones through the whole
  chain, decodes every packet leaving the Ethernet port, and checks it
  against the expected timestamps, channels and spectra. It also counts that
  each mechanism occurred at least once: PPS resynchronisation, saturation,
  FIFO drops under back-pressure, spectra completion, and mux switches
  between the streams.
- **`tb_mexart_full`** runs the same checks with every parameter at its
  default: 16 inputs, 4096-sample frames, 512 channels. It runs about 17
  frames (70,000 samples), including the three frames that fill the PFB
  history and a stall of the Ethernet port. The PPS comes every 50,000
  samples instead of every 100 million, so that a second roll-over happens
  within the run.

### Running a testbench

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/mexart_pkg.sv rtl/pfb_fir.sv rtl/fft_sdf_stage.sv rtl/fft_sdf.sv \
    rtl/channelizer.sv tb/tb_channelizer.sv --top tb_channelizer
./obj_dir/Vtb_channelizer
```

The package file must come first. Each block needs its own file plus the files
of the blocks it contains. The top-level testbenches need every file in
`rtl/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/mexart_pkg.sv \
    $(ls rtl/*.sv | grep -v mexart_pkg) tb/tb_mexart_full.sv --top tb_mexart_full
```

Verilator is a two-state simulator, and the testbenches reset or initialise everything
they read.

## Files

- `rtl/mexart_pkg.sv`: shared constants, the frame timestamp struct, the
  packet word struct and the SPEAD item IDs.
- `rtl/*.sv`: one module per file, as named above. `fft_sdf_stage` is a
  helper of `fft_sdf`.
- `tb/tb_<module>.sv`: testbench for each module.
- `tb/tb_mexart_full.sv`: the full-size run.
