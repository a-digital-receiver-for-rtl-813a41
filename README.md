# MWA digital receiver

This design is a 16-input digital receiver for a low-frequency radio telescope station. There are eight dual-polarised antenna tiles, which give 16 signals. Each signal is sampled at 655.36 MS/s with 8 bits and arrives as four samples per 163.84 MHz clock. The receiver splits each signal into 256 coarse channels of 1.28 MHz. It keeps 24 selected channels per signal, requantises them to 5+5-bit complex values and sends them as packets over three fibre links. It can also capture whole spectra ("burst") and raw sample blocks for a 1 GbE monitoring port. A register bus gives the host access to the control registers and the meta-data.

## Data path (one pipeline per input)

1. **ADC diagnostic mux**: selects either the ADC samples or a ramp pattern.
2. **Walsh demodulation** (`walsh_demod`): negates the samples while the input's Walsh function is in its −1 state. The function is a Hadamard row selected by the pipeline number. Its 16 states each last `WALSH_STATE_CLKS` clocks and restart on the one-second sync. Latency is 1 clock. The sample width grows to 9 bits.
3. **ADC power monitor** (`adc_power_monitor`):
   - Sums the squared samples over each second.
   - Counts 128-clock windows whose power exceeds a threshold. This count is the time-domain RFI flag.
4. **Polyphase filter bank** (`pfb`):
   - Filter: an 8-tap × 512 Kaiser-windowed sinc filter (β = 6, 12-bit coefficients).
   - Transform: a 512-point radix-2 FFT with 32 butterflies per clock.
   - Output: one 781.25 ns frame of 128 clocks gives 256 channels, two per clock. Lane 1 carries channel k in slot k. Lane 2 carries channel 256−k, or channel 128 in slot 0.
   - Latency: 75 clocks from the last sample of a frame to slot 0.
5. **Filter-bank diagnostic mux**: replaces the spectrum with a known pattern.
6. **Spectrum integrator** (`spectrum_integrator`):
   - Accumulates |X|² per channel over each second.
   - Counts frames in which a channel exceeded a threshold. This count is the frequency-domain RFI flag.
7. **Gain** (`gain_module`): a per-channel 16-bit gain in 4.12 format, with rounding and saturation. It is written over the bus and resets to unity.
8. **Channel selector** (`channel_selector`): a double-buffered frame store.
   - Channel mode: a 24-entry table chooses the channels sent.
   - Burst mode: all 256 channels are read once every `BURST_PERIOD` frames (1024).
9. **Requantiser** (`requantizer`): divides by 2^8, rounds half away from zero and saturates to ±15 on each of the real and imaginary parts.

## Shared blocks

- **`sync_pulse_gen`**: locks to the GPS one-second tick and then free-runs at 163 840 000 clocks. It can be re-armed from the bus. The sync pulse closes every integration and restarts the Walsh and burst counters.
- **`aggregator`**: builds one 87-word packet per frame for each of the three fibres. Each fibre carries 8 of the 24 channels for all 16 inputs. The packet layout is:
  - marker 0x4D57
  - node/fibre word
  - seconds
  - 21-bit frame count
  - sequence number
  - 80 payload words of packed 10-bit samples
  - 16-bit sum checksum
- **`gbe_formatter`**: produces 32-bit records on the GbE port. Each record starts with a header word {E7, kind, pipe, seq}. There are three record kinds:
  - monitor: 8 words, one selected channel of all inputs
  - burst: 256 words per input
  - raw: 64 words, 256 samples per input

  The UDP/IP framing is left to a standard MAC core.
- **`mc_registers`**: the host bus. Reads return 2 clocks after the request. The address map is:

  | Address | Contents |
  |---|---|
  | 0x0000 | mode |
  | 0x0001 | diagnostic selects |
  | 0x0002 | node id |
  | 0x0003 | Walsh enable |
  | 0x0004 / 0x0005 | thresholds |
  | 0x0006 | monitor slot |
  | 0x0007 | sync re-arm |
  | 0x0008 | locked |
  | 0x0100+i | channel table |
  | 0x1000+256p+c | gains |
  | 0x2000+4p | ADC power, RFI count, flag |
  | 0x4000 / 0x5000 / 0x6000 + 256p+c | integrated spectrum low/high, event counts |

- **`diag_pattern`**: the ramp used by all diagnostic muxes.
- **`digital_receiver`**: the top level, which connects everything.

## Parameters that follow the source description, and own choices

These values come from the source description:
- 16 inputs and 8-bit ADCs at 655.36 MS/s
- 512-point critically sampled filter bank with 8 taps
- 24 channels on three fibres, 5+5-bit samples
- burst every 1024 frames, 256 raw samples
- one-second integrations

These are this design's own choices:
- coefficient and twiddle widths
- FFT scaling (output shift 11)
- gain format and requantiser shift
- packet and record layouts, and the register map

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M`. `tb_digital_receiver` runs the full-size design with a tone at channel 30.25 on every input. It exercises:
- channel mode
- meta-data reads
- burst and raw capture
- the ADC and fibre diagnostic patterns
- Walsh switching

Known issue: the filter-bank diagnostic pattern check in the top-level testbench still fails. It is the only failing check there (1 of 1706). All other mechanisms are seen and pass.
