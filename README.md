# An F-engine for a 2 GSPS dual-band, dual-polarisation receiver

An F-engine is the first digital stage of a radio-interferometer correlator
or beamformer. It takes the raw voltages of one antenna, splits them into
narrow frequency channels, aligns them in time with every other antenna, and
ships them out. The downstream X-engines or beamformers each handle only some
of the channels, but need every antenna for each one. So the F-engine also
has to turn its stream around. It receives "all channels of one instant" and
must send "many instants of one channel".

This RTL implements that chain for one antenna. The antenna has four inputs:
two bands (1–2 GHz and 2–3 GHz) in two polarisations (X and Y). Each input
is sampled at 2 GSPS. For every input the design:

1. filters with an 8-tap polyphase FIR, the front half of a critically
   sampled 2048-point polyphase filter bank (PFB);
2. delays by a whole number of samples (coarse delay, up to 65 535 samples);
3. transforms with a 2048-point FFT, which is an external core;
4. rotates each channel by a phase ramp that removes the sub-sample
   remainder of the delay. It multiplies by a per-channel complex gain and
   rounds to 8-bit complex values (fine delay);
5. corner-turns blocks of 512 spectra in two stages. The first stage is in
   external DDR4 memory; the second is on-chip.
6. wraps each run of 512 time samples of one channel and one input into a
   SPEAD heap. The heap is one packet with a 1 kB payload.

A processing-system register bus controls the engine. Runs start on a
pulse-per-second (PPS) edge, and a snapshot buffer can capture one frame at
three points of the pipeline.

The arithmetic of the channeliser, the delay model and the packet format are
the parts a user most often needs to match in software. The corner turner is
the hardest part to follow in the code. Both get the most space below.

## Streams, words and the clock

Everything runs in one clock domain at 250 MHz: 2 GSPS divided by 8 samples
per clock.

| name | type (`fengine_pkg`) | contents |
|---|---|---|
| stream | index 0..3 | 0 = band 1 X, 1 = band 1 Y, 2 = band 2 X, 3 = band 2 Y |
| `sample_word_t` | 8 × signed 16 bit | 8 consecutive ADC samples of one stream; lane 0 is the earliest |
| `fft_word_t` | 8 × (27-bit re, 27-bit im) | 8 consecutive FFT bins |
| `chan_word_t` | 8 × (8-bit re, 8-bit im) | 8 consecutive channels after the fine delay |
| `wide_word_t` | 32 × (8-bit re, 8-bit im) = 512 bit | a DDR4 / network word; element 0 in the MSBs |

A frame (one FFT input, or one spectrum) is 2048 samples, which is 256
clocks. The first word of a frame is marked with a `sof` (start-of-frame)
flag. Every block from the FIR to the fine delay carries `valid`/`sof`
alongside the data. Nothing before the corner turner can stall. The ADC
does not stop, so the datapath is a fixed-latency pipeline.

## Module map

```
 adc_data[4] ─► pfb_fir ×4 ─► coarse_delay ×4 ─► (FFT, external) ─► fine_delay ×4
                                   ▲                                   ▲
                        delay_predictor (integer part)      (fractional part)
 fine_delay ─► ct_stage1 ◄─► (DDR4, external) ─► ct_stage2 ─► spead_packetizer ─► net_*
 reg bus ─► fengine_ctrl ─► coefficients, gains, delay model, start/stop, snapshot
 snapshot taps: ADC input, coarse-delay output, fine-delay output
```

| module | role | latency |
|---|---|---|
| `fengine_pkg` | types, constants, SPEAD ids, register map, rounding helpers | – |
| `pfb_fir` | 8-tap polyphase FIR, 8 lanes, coefficients in RAM | 4 clocks |
| `coarse_delay` | ring-buffer integer delay | 1 word + D samples + 2 clocks |
| `delay_predictor` | first-order delay model, integer and fractional outputs | updates once per spectrum |
| `cordic_rotate` | 16-stage pipelined CORDIC rotator (helper of `fine_delay`) | 17 clocks |
| `fine_delay` | phase ramp + complex gain + rescale to 8 bit; keeps bins 0..1023 | 20 clocks |
| `ct_stage1` | writes spectra to DDR4, reads them back one channel group at a time | block-scale |
| `ct_stage2` | on-chip transpose of one channel group into per-channel packets | group-scale |
| `spead_packetizer` | inserts the SPEAD header word in front of each 16-word payload | combinational |
| `fengine_ctrl` | register bus, PPS-synchronised start, stop, strobes | reads: 2 clocks |
| `snapshot` | one-frame capture buffer for debugging | one frame |
| `fengine_top` | wires it all; external parts are ports | – |

## Polyphase FIR (`pfb_fir`)

For output sample `m` of frame `k` the filter computes:

```
y[k·M + m] = Σ_{p=0}^{7}  x[(k−p)·M + m] · c[p·M + (M−1−m)]
```

- `c` is a 16 384-entry table of 27-bit signed coefficients with 25
  fractional bits, so the range is ±2. They are loaded over the register bus.
- The address layout means that a plain prototype filter `h[i]` (i = 0 …
  16 383) is loaded as-is: write `h[i]` to coefficient address `i`.
- The sum is rounded (half up) by 25 bits and saturated to 16 bits.

Each of the 8 lanes holds its own slice of the last 7 frames in a ring of
block RAMs. A new frame overwrites the oldest slot. Taps that would reach
back before the first frame after a reset contribute zero. So the first 7
spectra of a run are a partially filled filter, as in any streaming PFB.

## Delay correction

### Delay model (`delay_predictor`)

The geometric delay is modelled as a straight line in time:
`delay(n) = delay0 + rate · n`, with `n` counting spectra.

- The accumulator is 48 bits wide: 16 integer and 32 fractional bits,
  in samples.
- `delay0` is written as 16.16 samples. `rate` is signed, in units of
  2⁻³² samples per spectrum (one spectrum is 1.024 µs).
- Writing `REG_DELAY_LOAD` loads the model at the next spectrum. The model
  is also loaded at once when a run starts.
- The delay saturates at 0 and at just under 65 536 samples.

A single predictor serves all four streams: one board is one antenna, so
all its inputs share one geometric delay. Per-input instrumental delays go
into the complex gains.

### Coarse delay (`coarse_delay`)

The ring buffer is written 8 samples per clock and read at
`write_pointer − D`. The integer delay D is taken from the predictor at each
frame start, so a change never splits a frame. It can be any number of
samples, not only a multiple of 8:

- the word part of D selects two adjacent RAM words;
- the lane part rotates them across a 16-sample window.

The output is `x[n − D − 8]`. The extra 8 samples are a fixed word of
latency and are common to all streams and antennas. Samples not yet written
read as zero.

### Fine delay, gains and rescaling (`fine_delay`)

The integer delay cannot remove the sub-sample remainder τ. That remainder
is applied in the frequency domain: channel *l* is multiplied by
`exp(−j·2π·l·τ/M)`. The complex gain of the channel is applied in the same
rotation. For every bin the module:

1. reads the gain `{amp[15:0], phase[15:0]}` of channel *l* from a
   dual-port RAM, one bank per lane. The host writes port A and the datapath
   reads port B.
2. forms the phase `φ = phase − l·τ/M`. All phases are unsigned turns with
   2¹⁶ to one turn. τ is the 16-bit fractional delay in 2⁻¹⁶ samples,
   latched at the spectrum start.
3. rotates the 27-bit bin by φ with a 16-stage CORDIC. The angle table is
   in 2⁻²⁰ turns; the error is below 1 LSB of the 8-bit output.
4. multiplies by `amp · (1/K)`, where `1/K = 39 797/2¹⁶` removes the CORDIC
   gain K ≈ 1.6468. `amp` is unsigned with 16 fractional bits.
5. rounds (half away from zero) and saturates to signed 8-bit real and
   imaginary parts.

Only bins 0..1023 are kept. A real input gives 1024 independent channels of
0.977 MHz each.

**Scaling.** The FFT output is unscaled (27 bits, 14 integer bits), so the
gain amplitude carries the whole reduction to 8 bits. Set it from the
measured power per channel. For example:
- a full-scale tone of amplitude A lands as `A·M/2` in one bin;
- the FFT model in the testbench divides by 4.

### Where the delays sit

The coarse delay sits between the FIR and the FFT. The fine delay follows
the FFT.

The text this design follows also lists the integer delay ahead of the
whole PFB, which contradicts its own block diagram. This RTL uses the
diagram order.

## Corner turner (`ct_stage1`, `ct_stage2`)

### What it has to do

The fine delay produces, every 256 clocks, one spectrum per stream:

- 1024 channels × 4 streams of 16-bit complex samples;
- 8 channels × 4 streams per clock, packed into one 512-bit word;
- word index `k = s·8 + lane` in the `wide_word_t`.

The network wants, for each channel and stream, 512 consecutive time
samples in one packet. A block of T = 512 spectra has to be transposed from
(time, channel) order to (channel, time) order. That is 4 MiB per block,
which is too big for on-chip memory. A single DDR4 transpose would mean
reading one 32-byte scrap per burst, which DDR handles badly. The transpose
is therefore split in two, as drawn in the block diagram of the original
design:

```
(T, F1, F0) ──stage 1, DDR4──► (F1, T, F0) ──stage 2, on-chip──► (F1, F0, T)
```

- F0 = 128 channels form a group and stay together in stage 1.
- F1 = 1024 / 128 = 8 groups.
- Stage 1 only reorders whole group rows, 16 words = 1 KiB long. DDR4
  accesses are therefore 1 KiB contiguous bursts.
- Stage 2 transposes one 128-channel × 512-spectrum group at a time.

### Stage 1: DDR4 (`ct_stage1`)

The two block regions are used ping-pong. Word addresses (one word = 64 B)
are:

```
addr = region·T·CW + t·CW + f1·GW + c          CW = 1024/8 = 128 words per spectrum
                                               GW = F0/8  = 16 words per group row
```

**Write side.** Every spectrum is written in order (t fixed, words
`0..CW−1`), through a 16-word FIFO into `wr_valid/wr_ready`.

**Read side.** Once a region is complete, a read FSM (`R_IDLE → R_WAIT →
R_REQ → R_DONE`) runs once per group f1:

1. it waits for `grp_free` from stage 2;
2. it pulses `grp_start` with the group and block number;
3. it requests the group's 16-word row for every t = 0..511. That is
   8192 requests per group, each with an address.
4. DDR read responses come back in order and go straight to stage 2 as
   `out_valid/out_data`.

A region counts as full when its last word has actually left the FIFO for
the DDR, not when it entered the FIFO. So a read can never overtake the
write of the same data.

**Overflow.** The ADC cannot be stopped, so stage 1 never back-pressures
the pipeline. If the FIFO fills, or the next region to write is still being
read, incoming words are dropped and a sticky `overflow` flag is set
(`REG_STATUS[3]`).

**Rates.** Input is one word every 2 clocks on average: 128 words per
256-clock spectrum. Reading a block takes 65 536 words, against the 131 072
clocks a block lasts. So the read side runs at half duty when the network
keeps up. Overflow only happens when the network (or the DDR) stalls for a
large part of a block.

### Stage 2: on-chip (`ct_stage2`)

Stage 2 receives a group as 512 × 16 words in (t, cg) order. Here cg is the
group of 8 channels within the 128, and each word holds 8 channels × 4
streams. It must emit words of 32 consecutive times of one (channel,
stream).

A plain memory would need 32 reads of different words for every output
word. Instead the buffer is 32 banks wide with a diagonal skew:

```
sample k (0..31) of the word written at time t  →  bank (t + k) mod 32,
                                                   address t·GW + cg
```

**Writes.** The 32 samples of one input word go to 32 different banks in
one clock.

**Reads.** For output (channel, stream) → k, and times t0..t0+31:
- sample t sits in bank (t + k) mod 32;
- the 32 times therefore again hit 32 different banks, all in one clock;
- each bank uses its own address `t·GW + cg`;
- the read data is rotated back by k into time order.

Two such group buffers are used ping-pong, and `grp_free` tells stage 1
when one is empty. At the default size this is 2 × 512 × 16 × 512 bits =
8 Mibit. That fits the 32 UltraRAMs the target spends on it: one bank per
UltraRAM column.

**Output order.** Packets come out in this order:
- channel-major, then stream;
- within a group, channel `f1·128 + c` for c = 0..127;
- each packet is 16 words of 32 samples, flagged by
  `out_first/out_last`.

The output is a valid/ready stream, so the network can push back. A
stalled network fills stage 2, then stage 1's DDR region. Only when that is
still busy at the next block boundary does the overflow flag trip.

## Packets (`spead_packetizer`)

Every heap is exactly one packet: one 64-byte header word followed by 16
payload words.

The header word holds a 64-bit SPEAD header followed by seven 64-bit item
pointers. SPEAD uses 64-bit item pointers with 16-bit ids and 48-bit values
(the flavour with 48-bit addresses):

| position | id | value |
|---|---|---|
| 0 | – | `0x5304_0206_0000_0007`: magic 0x53, version 4, 2-byte id, 6-byte address, 7 items |
| 1 | 0x8001 | heap counter, +1 per packet since the run start |
| 2 | 0x8002 | heap size = 1024 |
| 3 | 0x8003 | heap offset = 0 |
| 4 | 0x8004 | payload length = 1024 |
| 5 | 0x9600 | timestamp: clocks since the run start at the first sample of the block = block · 512 · 256 |
| 6 | 0xC101 | ordering vector: [47:32] antenna id, [31:16] channel over both bands (band·1024 + channel), [15:0] polarisation (0 = X, 1 = Y) |
| 7 | 0x4300 | raw data, payload offset 0 |

The payload is 512 × (8-bit real, 8-bit imaginary), oldest time first, real
part first. The 512-bit words leave on `net_data` with `net_last` on the
17th word. `net_chan` and `net_pol` are side-band copies for a network
block that wants to choose a destination per channel. UDP/IP/Ethernet
framing is not part of this RTL.

Only bit positions 5 and 6 are specific to this design. The two custom item
ids (0x9600, 0xC101) are this design's choice. A receiver must be told them.

## Control (`fengine_ctrl`) and monitoring (`snapshot`)

The register bus uses word addresses:
- a write is one clock of `reg_wr`;
- a read is one clock of `reg_rd`, followed two clocks later by
  `reg_rvalid` and `reg_rdata`.

Bridge it to AXI-Lite or whatever the host offers.

| address | access | meaning |
|---|---|---|
| 0x0000 | w | bit 0 start (arm), bit 1 stop |
| 0x0001 | r | bit 0 running, bit 1 armed, bit 2 snapshot done, bit 3 corner-turn overflow |
| 0x0002 | rw | antenna id (16 bit) |
| 0x0003 | rw | delay0, 16.16 samples |
| 0x0004 | rw | delay rate, signed, 2⁻³² samples per spectrum |
| 0x0005 | w | load delay0/rate at the next spectrum |
| 0x0006 | w | snapshot: bit 0 trigger, [2:1] source (0 ADC, 1 coarse delay, 2 fine delay), [4:3] stream |
| 0x1000 + i | r | captured sample i (16 bit: a raw sample, or {re, im} for the fine-delay tap) |
| 0x4000 + i | w | FIR coefficient i (27 bit) |
| 0x8000 + s·2048 + l | w | gain of stream s, channel l: {amp[31:16], phase[15:0]} |

**Start and stop.** Start only arms the engine. The run begins at the next
rising PPS edge, seen through a two-flop synchroniser, so every board of
an array starts on the same second. While not running, every pipeline
block is held in reset. This covers the FIR history, delay lines, corner
turner, heap counter and timestamp, and the same reset goes out as
`fft_rst_n`. A stop therefore clears all state. A later start needs no
reloading: coefficients, gains and settings live outside the pipeline
reset.

**Snapshot.** The snapshot arms on a trigger. From the next frame start of
the chosen source it stores one frame of one stream:
- 2048 samples for the ADC and coarse-delay taps;
- 1024 channels for the fine-delay tap.

It then raises `snapshot done`.

## External parts

These parts are not RTL here. Their signals are ports of `fengine_top`:

- **ADCs**: `adc_data`, 4 × 8 samples per clock.
- **FFT**: a vendor super-sample-rate 2048-point FFT.
  - It takes `fft_in_*` (8 samples/clock/stream with `sof`) and returns
    `fft_out_*` with bins in natural order, 27-bit unscaled.
  - It must keep `valid` high for a whole spectrum once it starts, and
    reset with `fft_rst_n`.
  - One `valid`/`sof` pair serves all four streams.
- **DDR4 controller**: `ddr_wr_*` writes 512-bit words with valid/ready.
  `ddr_rd_req_*` sends read requests, and `ddr_rd_resp_*` returns responses
  in request order. Word addresses are 64-byte units; one region is
  65 536 words (4 MiB) and two regions are used.
- **Network**: `net_*` is a 512-bit valid/ready packet stream.
- **Host**: the register bus and `pps`.

The testbench directory has behavioural models of the FFT (`fft_model`, a
floating-point radix-2 FFT with output scaled by 1/4) and the DDR4
(`ddr_model`, with fixed latency and optional random stalls).

## Verification

Each block has a self-checking testbench. Every testbench ends by printing
`TB_RESULT checks=<n> failures=<n>`.

| testbench | checks |
|---|---|
| `tb_pfb_fir` | FIR equation against a direct sum, latency, `sof` |
| `tb_coarse_delay` | exact `x[n−D−8]` for delays that change on frame boundaries, including D not a multiple of 8 and the maximum delay |
| `tb_delay_predictor` | accumulation, load timing, saturation at both ends |
| `tb_fine_delay` | against a floating-point rotation/gain/rounding (±1 LSB), latency 20 |
| `tb_ct_stage1` | DDR addresses and read order, with random DDR stalls and the overflow flag |
| `tb_ct_stage2` | every output sample of several groups against its source position, with random back-pressure |
| `tb_spead_packetizer` | every header field and the payload pass-through |
| `tb_fengine_ctrl` | PPS-edge start, stop, register read-back, all strobes |
| `tb_snapshot` | capture from each source, frame alignment, read-back |
| `tb_fengine_top` | whole engine at reduced size; see below |
| `tb_fengine_full` | whole engine at full size; see below |

**`tb_fengine_top`.** This is the whole engine at reduced size: M = 64, 32
channels, T = 64, F0 = 16. Every payload sample of every packet is compared
with a reference computed from the input. The reference chain is the FIR
equation, the integer delay, a DFT, then gain and phase ramp, rounded to 8
bits. The run:

1. starts on PPS;
2. stops and restarts with a new fractional delay;
3. reloads the delay model with a non-zero rate while running;
4. takes an ADC snapshot;
5. holds the network off until the corner turner overflows.

It counts each of these mechanisms, plus network and DDR stalls, and fails
if any never happened.

**`tb_fengine_full`.** This is the engine at its default size: M = 2048,
1024 channels, T = 512, F0 = 128, 65 536-sample delay line. One complete
block of 512 spectra runs through the real corner turner and all 4096
packets are checked:
- every header field and the packet order;
- a tone on bin 100 of stream 0 must show a steady magnitude near its
  predicted value;
- every other channel and stream must stay at zero.

It simulates in well under a minute.

To simulate with plain Verilator, put the package first:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_fengine_full \
  rtl/fengine_pkg.sv $(ls rtl/*.sv | grep -v fengine_pkg) \
  tb/fft_model.sv tb/ddr_model.sv tb/tb_fengine_full.sv
obj_dir/Vtb_fengine_full +verilator+rand+reset+2
```

For a block testbench, list the package, the block's module (and
`cordic_rotate` for `fine_delay`, `ddr_model` for `tb_ct_stage1`) and the
testbench. The testbenches initialise
everything they read, and they pass with random initial state
(`+verilator+rand+reset+2`).

## Departures, gaps and choices to know about

- **Block order.** The coarse delay is placed after the FIR, as in the
  block diagram, not before the whole PFB as one sentence of the original
  description puts it. Both are linear per sample, so the channel data are
  the same except around a delay change and in frame alignment.
- **Delay range.** The range is 65 536 samples. The original description
  also quotes "about 300 µs / 90 km" for it, which does not follow: 65 536
  samples at 2 GSPS are 32.8 µs. The block-RAM budget quoted for this block
  (32 BRAM per stream, enough for 65 536 × 16 bit) supports the sample
  count, so that was built.
- **Test-signal input.** The original system can inject a host-generated
  test tone into the PFB instead of the ADC data, for channel-response
  sweeps. There is no such input mux here. Drive `adc_data` instead.
- **Channel count and group size.** The number of channels kept (1024) and
  the stage-2 group size (128) are inferred, not given. 1024 matches the
  quoted DDR4 traffic: 4 × 1024 × 2 B × 10⁶ spectra/s = 8.192 GB/s. 128
  matches the 32 UltraRAMs quoted for the corner turner.
- **This design's own formats and interfaces.** These are not given by the
  original and were chosen here:
  - all number formats of the delay model and gains;
  - the CORDIC;
  - rounding modes;
  - the register map and bus;
  - the DDR and network interfaces;
  - the SPEAD item ids of the two custom fields;
  - the bit layout of the ordering vector.
- **Overflow handling.** Overflow drops data and sets a flag. Nothing
  resynchronises the packet stream after an overflow except a stop/start.
