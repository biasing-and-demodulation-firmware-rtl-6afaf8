# DFMUX firmware signal path: multi-tone bias synthesis and demodulation

Frequency-domain multiplexed readout of superconducting bolometers (TES)
biases many detectors through a single pair of wires. Each detector sits in a
resonant filter tuned to its own frequency. A comb of sinusoidal carriers,
one per detector, flows through all of them. The detector's varying
resistance amplitude-modulates its carrier. A second comb (the *nuller*) of
the same frequencies, with adjustable amplitude and phase, is injected at the
SQUID amplifier to cancel the carriers, so that only the small sidebands
carrying the signal are amplified. After digitisation, every carrier is
demodulated back to baseband and decimated down to a few tens to thousands of
samples per second.

This RTL is the digital core of such a readout board. It serves four readout
modules (one ADC and two DACs each), and contains:

* **DMFS** (digital multi-frequency synthesizer), 8 instances: a carrier comb
  and a nuller comb per module, 16 independently programmable sinusoids each,
  summed into one 16-bit DAC word at 25 MSPS;
* **DMFD** (digital multi-frequency demodulator): 68 demodulator channels
  (17 per module: 16 detectors plus one spare, for example the quadrature
  partner of another channel). Each has its own reference oscillator and is
  followed by a cascade of decimating filters. The output goes through a
  selectable tap-off point, a timestamp inserter and a 16k-word FIFO towards
  the board's processor.

Everything runs from one 200 MHz core clock. The converters run at 25 MSPS,
so one converter sample spans exactly 8 core cycles. Much of the design uses
those 8 cycles, or the much longer gaps between decimated samples, to share
one piece of hardware among many channels.

## Clocking and the sample strobe

`dfmux_top` divides the core clock by 8 (`CLK_DIV`) into a one-cycle strobe
`sample_en_o`. Every 25 MSPS event is a strobe in the core domain: a DAC word
on `dac_valid_o`, an ADC sample on `adc_i`. A board would derive the
converter clocks synchronously from the same oscillator; this RTL has no
clock-domain crossing.

## Bias synthesis (DMFS)

### A time-shared DDS (`dds_tdm`)

A DDS advances a phase accumulator by a frequency word per sample and turns
the phase into a sine through a table. Building 16 of them per comb, and
8 combs, would be wasteful, because each DDS would sit idle 7 of every
8 cycles. Instead, one `dds_tdm` keeps **eight** 32-bit accumulators and
services one of them per core cycle (`slot_i` = 0..7). Two instances give the
16 channels of a comb.

For each slot:

1. `phase = acc[slot] + phase_offset[slot]`, then `acc[slot] += freq[slot]`.
   The accumulator advances once per 25 MSPS sample, so the output frequency
   is `freq * 25 MHz / 2^32` (5.8 mHz resolution).
2. The top 14 bits of `phase` address a sine table. Only a quarter wave is
   stored: 4096 entries of 12 bits, computed at initialisation as
   `round(2047 * sin(2*pi*(i+0.5)/16384))`. The half-step offset makes the
   quarter symmetric, so the other three quarters need only address mirroring
   and negation, with no special cases at 0 and pi.
3. The output is a 12-bit two's-complement sample, three cycles after the
   slot was presented, with its slot number.

The phase offset lets the nuller tone of a channel sit at any phase relative
to its carrier. All eight synthesizers start their slot counters and
accumulators at the same reset, so in this RTL they happen to be in step.
Nothing relies on that: the carrier–nuller phase that matters is set through
the offsets and found by measurement.

### Weighting and summing (`dmfs`)

Each DDS sample is multiplied by its channel's 20-bit signed amplitude. The
32-bit product is truncated to its top 16 bits. The 16 truncated products of
a sample period are added, and the sum is saturated to 16 bits. The word then
leaves in offset binary for the DAC (`dac_o`), and in two's complement for the
demodulator's loopback inputs (`dac_twos_o`). The first sample period after
reset is discarded so that no partial sum reaches the DAC. Full-scale
amplitude on one tone (`2^19-1`) gives about ±2047·2^19/2^16 ≈ ±16k codes,
so two full-scale tones already fill the DAC. In practice each channel's
amplitude is a fraction of full scale.

## Demodulation (DMFD)

### Input routing (`input_crossbar`)

Each module's demodulators can listen to any of 12 sources:

* the four ADCs;
* the four carrier DACs;
* the four nuller DACs.

The DAC words are taken as their top 14 bits. `route_i[m]` is a
`{src, index}` struct. Looping a comb back digitally checks the whole chain
without any analog hardware. The testbenches use this.

### Coarse reference oscillators (`ref_synth`)

A demodulator channel multiplies the 14-bit input by a local copy of its
carrier. An accurate sine would need a table per channel. Instead, each
channel steps through a 16-entry sequence addressed by the top four bits of
its own 32-bit phase accumulator:

    0, 3, 6, 7, 7, 7, 6, 3, 0, -3, -6, -7, -7, -7, -6, -3   (units of 1/8)

This is a coarsely quantised sine. Its spectrum contains harmonics besides
the fundamental, mostly from the 16-step sampling of the phase (near 15 and
17 times the reference frequency) and smaller ones from rounding the values
to eighths. The fundamental's amplitude is about 0.963 of the peak of 1, and
the RMS of the sequence is about 0.68. Because each detector's signal
occupies only a narrow band around its carrier, these spurious products
mostly land away from baseband or are removed by the decimation filters.
The saving is large: no sine table per channel, and a multiplier with only
4 bits on one side.

The mixer product `x * coef` (14×4 bits, at most ±7·8191) is shifted right
by 3 and kept at 14 bits. The reference's peak of 7/8 keeps this from
overflowing.

**Phase bus.** Independently running accumulators cannot hold a fixed phase
relation. All 68 reference oscillators therefore share a 32-bit bus. The
channel chosen by `phase_bus_src_i` drives it with the phase its accumulator
will take at the next sample (`acc + freq`). Another channel given a one-cycle
`load` strobe in `ref_cfg_i` sets its accumulator to that bus value plus its
own programmed offset at the next sample. Two channels with equal frequency
stay locked from then on. With an offset of 2^30 (a quarter turn) they form
an I/Q pair, which is the use intended for the 17th channel of a module. The
load strobe is remembered until the next sample, so it may arrive in any of
the 8 cycles.

### CIC1: one per channel (`cic_decim`)

The mixer output, at 25 MSPS, is decimated by 128 in a three-stage CIC filter
of its own. No sharing is possible at this rate, because a new sample arrives
every 8 cycles for all 68 channels.

* The integrators are 35 bits wide: 14 bits + 3·log2(128).
* Modular wrap-around in the integrators is harmless: the comb stages undo it
  exactly.
* The output is taken as the top 17 bits of the comb result.
* Output rate: 195.3 kHz.

Because the integrator stages are registered, output *m* equals the ideal
CIC response at input sample `m*R - 4`.

### Serialisation (`channel_mux`)

After CIC1, the 68 channels produce one sample each per 1024 core cycles,
all in the same cycle. `channel_mux` latches the 68 outputs and sends them on
one bus as `{chan, data}` beats on consecutive cycles, channel 0 first. That
takes 68 of the 1024 available cycles. An assertion checks that a new set
never arrives while the previous one is still being sent.

### CIC2: one shared filter for all channels (`cic2_tdm`)

The second CIC decimates by 16 with four stages, on the serial bus.

* Its integrator and comb registers are arrays indexed by channel number.
  Each arriving beat reads that channel's state, updates it in one
  combinational chain, and writes it back.
* A frame counter decides on which frames (every 16th) the combs run and a
  result leaves.
* Integrators are 33 bits (17 + 4·4). The output is the top 17 bits.
* Output rate: 12.21 kHz per channel.
* Output frame *m* is the ideal response at input frame `m*R - 1`.

### FIR1..FIR6: one multiply-accumulate engine per stage (`fir_decim_tdm`)

Each FIR stage is a decimate-by-2 low-pass filter for all 68 channels.

* FIR1 has 43 taps. FIR2..FIR6 are identical, with 108 taps.
* A stage stores every arriving sample in a per-channel circular delay line,
  one memory of `NCH*NTAPS` words.
* After every second complete input frame, a single pipelined
  multiply-accumulate engine walks the channels. For each channel it forms
  `sum_k c[k] * x[newest - k]` (one tap per cycle, 48-bit accumulator),
  scales by 2^-17, saturates to 17 bits and emits `{chan, data}`.

The work is 68·43 = 2924 cycles for FIR1 and 68·108 = 7344 cycles for a
108-tap stage. The budget is the 32768 cycles between FIR1 runs, and double
that for each later stage, so one engine per stage is idle most of the time.
An assertion flags a frame arriving while the engine is still running.

After reset, the memory is not cleared. Instead, a count of frames received
makes taps older than the first frame read as zero. The start-up response is
therefore that of a zero-filled delay line.

**Coefficients.** The coefficients are computed in SystemVerilog when the
filter is initialised (functions in `dfmux_pkg`). They are rounded to 18 bits
with 17 fractional bits and normalised to unit DC gain.

* FIR2..6 are Kaiser-windowed sinc filters (β = 10) with the cutoff at a
  quarter of the input rate, the half-band point of a decimate-by-2 stage.
* FIR1 also restores the passband that the two CIC stages have bent down. At
  1.37 kHz, CIC2 and CIC1 together lose about 0.74 dB. FIR1's ideal response
  is therefore `D(f) = 1 / (H_CIC1(f) * H_CIC2(f))` up to a quarter of its
  input rate, and zero above. Tap k is the inverse transform of D,
  `2 * integral_0^{1/4} D(f) cos(2*pi*f*(k-21)) df`. This integral is
  evaluated with a 128-point midpoint rule and multiplied by a Kaiser window
  (β = 8).
* The testbench cascades FIR1 with independent models of the CICs. The result
  is flat within 0.01 dB up to 1.37 kHz.

These are this design's filters, not the original firmware's, which come
from a vendor filter generator and are not published.

| Stage | Decimation | Taps | Output rate per channel |
|-------|-----------|------|-------------------------|
| CIC1  | 128 | – | 195.3 kHz |
| CIC2  | 16  | – | 12.21 kHz |
| FIR1  | 2   | 43 | 6103 Hz |
| FIR2  | 2   | 108 | 3052 Hz (3051.8) |
| FIR3  | 2   | 108 | 1526 Hz |
| FIR4  | 2   | 108 | 762.9 Hz |
| FIR5  | 2   | 108 | 381.5 Hz |
| FIR6  | 2   | 108 | 190.7 Hz |

## The output stream

### Stage selection and words (`stream_packer`)

`stage_sel_i` (`stage_sel_e`: 0 = CIC2, 1..6 = FIR1..FIR6) picks which
stage's samples go to the FIFO. Every selected sample becomes one 32-bit word:

    [31:24]  channel identifier (0..67)
    [23:0]   sample, sign-extended to 24 bits

When channel 0 of a frame passes, the 96-bit timestamp of the current format
is captured. Right after channel 67, the timestamp follows as four words
carrying 24-bit pieces, least significant piece first. Their identifiers name
the format and the piece:

| Format (`ts_format_i`) | Source | Identifiers of pieces 0..3 |
|----|----|----|
| 0 | IRIG-B decoder time + ticks | 240, 241, 242, 243 |
| 1 | EBEX decoder time + ticks  | 244, 245, 246, 247 |
| 2 | internal free-running 96-bit counter | 248, 249, 250, 251 |

A frame is therefore 72 words: 68 samples + 4 timestamp words. A reader
resynchronises on identifier 0 and knows the timestamp format from the
identifiers alone.

### Timestamps (`ts_mux`)

The external decoders are not part of this RTL. They deliver a 64-bit decoded
time and a one-cycle `new` strobe. For each external source, a 32-bit ticks
counter on the core clock restarts at zero with every new decoded time. The
timestamp `{decoded time, ticks}` thus locates a frame to 5 ns between
decoder updates. Format 2 needs no decoder.

The timestamp marks when the first sample of a frame *left the selected
filter*, not when the converter sampled it. The group delay of the CICs and
FIRs in front of the selected stage is constant for a given stage, and has to
be subtracted when the data are analysed.

### FIFO (`data_fifo`)

The FIFO is 16384 × 32 bits, first-word fall-through, with
`rd_en_i`/`rd_data_o`/`empty_o`/`level_o` towards the processor.

* A word arriving when the FIFO is full is dropped, and `overflow_count_o` is
  incremented. The processor can detect loss, and the filter chain never
  stalls.
* At the CIC2 rate the stream is 12207 frames/s × 72 words ≈ 879 kwords/s.
  At FIR6 it is ≈ 13.7 kwords/s. 16k words hold about 18.6 ms of CIC2 data.

## Top level (`dfmux_top`)

The top holds:

* the strobe divider;
* eight `dmfs` (carrier and nuller per module);
* `ts_mux`;
* `dmfd`.

All configuration comes in as ports: per-channel frequency, phase and
amplitude of both combs, the routes, the reference configuration, the phase
bus source, the output stage, the timestamp format and the decoder inputs.
A register bank written by a processor would drive them. `stage_valid_o`
shows which filter stages produced output in a cycle.

Parameters of `dfmux_top` (defaults are the full system):

| Parameter | Default | Meaning |
|---|---|---|
| `DCH` | 17 | demodulator channels per module (68 in total) |
| `CIC1_RATE` | 128 | CIC1 decimation |
| `CIC2_RATE` | 16 | CIC2 decimation |
| `FIFO_DEPTH` | 16384 | FIFO words |

Fixed sizes (widths, channel counts of the synthesizers, tap counts) are in
`rtl/dfmux_pkg.sv`.

## Departures from the original design, and what is this design's own

* **FIR coefficients.** The original's coefficients are not published. The
  filters here, including FIR1's droop correction, are designed by this RTL
  as described above. Structure, tap counts and rates are the original's. The
  stop-band depth actually reached is not characterised against the
  original's -100 dB target.
* **Channel count.** One block diagram of the original labels the
  demodulator with 64 channels; its text gives 17 per module, 68 in total.
  This design has 68.
* **Output tap-off.** The text says any FIR stage can feed the FIFO; the
  table of stages adds CIC2. This design offers CIC2 and FIR1..6.
* **Truncation in the synthesizer.** Each weighted tone is truncated to
  16 bits before the sum, as the original's noise budget counts it. The
  alternative reading, truncating the sum, was not taken. The sum is
  saturated (own choice).
* **One clock.** The original runs the converters in their own 25 MHz domain.
  Here the converter rate is a strobe in the 200 MHz domain.
* **Own encodings:**
  * the timestamp layout (64-bit decoded time + 32-bit ticks);
  * the identifiers 240..251 and the piece order;
  * the 32-bit reference accumulator width;
  * 18-bit coefficients;
  * the saturation of FIR outputs;
  * the FIFO's drop-on-full behaviour;
  * the port-based configuration interface.
* **Not included:** converters, analog front end and cryogenic electronics;
  the IRIG-B and EBEX decoders; the soft processor, its register bank, memory
  and network interfaces (packetising and UDP streaming of FIFO frames).

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
module's outputs against a reference model computed in the testbench, and
ends with `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_dds_tdm` | every sample of 8 channels against a floating-point sine of the accumulated phase (±1 LSB), slot order, latency |
| `tb_dmfs` | DAC words against a model of weighting, truncation, summing, saturation and offset binary |
| `tb_input_crossbar` | all 12 routes for random data |
| `tb_ref_synth` | sequence stepping, phase-bus load with a quarter-turn offset, lock held for 200 samples |
| `tb_demod_channel` | reference, mixer and CIC1 bit-exactly against a model, output spacing, DC level of a demodulated tone |
| `tb_cic_decim` | bit-exact comparison against a direct-form CIC model, output spacing |
| `tb_channel_mux` | order, tags and data of the serialised beats |
| `tb_cic2_tdm` | bit-exact against a per-channel CIC model |
| `tb_fir_decim_tdm` | bit-exact convolution, DC gain, stop-band rejection below -60 dB, for 43 and 108 taps |
| `tb_stream_packer` | word format, stage selection, timestamp capture and piece order |
| `tb_data_fifo` | against a queue model, including full, simultaneous read/write and overflow count |
| `tb_ts_mux` | ticks reset, formats, free-running counter |
| `tb_dmfd` | demodulator at reduced rates: frame format, frame periods of CIC2 and FIR1 output, I/Q magnitudes of an ADC tone and a loopback tone |
| `tb_dfmux_top` | end-to-end at reduced rates (`DCH=2`, `CIC1_RATE=16`, `CIC2_RATE=8`, `FIFO_DEPTH=64`); see below |
| `tb_dfmux_full` | end-to-end at the default parameters: 68 channels, loopback and ADC tones through an I/Q pair, frame format and period with CIC2, FIR1 and FIR6 selected, magnitudes with CIC2 and FIR1 |

`tb_dfmux_top` programs carrier tones, loops them into the demodulator and
checks the demodulated magnitudes against the programmed amplitudes. It also
routes a tone from the ADC input. It counts each mechanism as it is exercised
and fails if any count is zero:

* loopback routing;
* ADC routing;
* phase-bus locking;
* output-stage switching;
* timestamp insertion;
* each timestamp format;
* FIFO overflow with recovery.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/dfmux_pkg.sv tb/tb_dfmux_top.sv --top-module tb_dfmux_top -o sim
    ./obj_dir/sim

Replace `tb_dfmux_top` with any other testbench name. The full-size test
simulates about 4 million core cycles (about 37 frames, three of them at
the FIR6 rate) with all 68 channels, and finishes in well under a minute.

## How far to trust it

* The filter arithmetic (CIC1, CIC2, FIR) is checked bit-exactly against
  independent models.
* The synthesizer is checked against floating-point sines.
* The full chain is checked for amplitude, phase lock and framing at both
  reduced and full size.
* Not checked against the original hardware:
  * spectral purity (spur levels of the coarse reference, FIR stop-band depth
    at the original's -100 dB target);
  * behaviour with real converter clocking.
