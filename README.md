# Fully digital multi-beam array baseband

In a fully digital antenna array, every antenna element has its own RF chain
and its own pair of data converters. The digital fabric therefore sees each
element's signal separately. Steering a beam is then just arithmetic: the
receive beam in direction *b* is a weighted sum of the element signals,
`y_b = Σ_m W[b][m] · x_m`. Because the weights are applied to samples that are
already digital, the same samples can be summed with as many weight vectors
as there is logic for. The array receives in several directions at once,
where an analog phased array points in one direction at a time. Transmit
works the same way in reverse. Each data stream is multiplied by its own
steering vector and the results are added per antenna, so several streams
leave in different directions together.

This repository is the FPGA baseband of such a node for a mm-wave testbed
(28 GHz and 60 GHz front-ends, with the data converters of an RF system-on-chip):

* **4 antenna chains** with 12-bit ADC words on receive and 14-bit DAC words on
  transmit, sampled at fs = 1966.08 MSps.
* **Receive:**
  * per-chain calibration (a complex multiplier that cancels each chain's
    gain and phase error);
  * four simultaneous receive beams;
  * a power integrator per beam, used for beam-pattern measurements;
  * a snapshot buffer that hands beam or raw samples to the host.
* **Transmit:**
  * four independent streams, each a CW tone or QPSK data on its own
    frequency sub-channel;
  * each stream steered by its own weight vector onto the four DACs.

The RF parts are not here: lens, patch arrays, mixers and LO distribution.
The data-converter hard blocks, the processor system and the host software
are not here either. The design meets them at its ports: ADC and DAC words,
plus static configuration inputs that the host writes.

## Samples per clock

1966.08 MSps is too fast for one sample per FPGA clock. Every sample port
therefore carries **L = SPC = 8 consecutive samples** of a chain per clock,
as an extra array dimension `[chain][lane]` with lane 0 earliest. The fabric
clock is fs/8 = 245.76 MHz. All arithmetic that works sample by sample is
copied once per lane:

* calibration;
* the receive beamformer;
* the CORDIC rotators;
* the transmit precoder.

The blocks that work across time know about lanes:

* **Power integrator:** `int_len` counts *words* of 8 samples.
* **NCO:** sample *k = 8·word + l* gets phase *k·ftw*.
* **Symbol timer:** a symbol lasts `sps/8` words, so `tx_sps` must be a
  multiple of 8.
* **Capture buffer:** stores one full word per address, 8 samples × 4 beams.

`SPC` is a package constant (`mbf_pkg`). The top's `L` parameter and the
blocks' `LANES` parameters default to it. With `L = 1` the design is a plain
one-sample-per-clock datapath.

## Receive path

```
adc[4][8] ─► rx_calibration ─► beamforming_matrix (4×4) ─► beam[4][8] ──► outputs
            (×cal[m], Q2.14)   (Σ_m W[b][m]·x_m, Q2.14)       │
                                                             ├► beam_power_integrator ×4
adc ──────────────────────────────────────────────────────────┴► capture_buffer (cap_src)
```

**Calibration.** Chain *m*'s sample is multiplied by `cal[m]`, a Q2.14
complex coefficient where 16384 = 1.0. The range [−2, 2) allows up to 6 dB of
gain correction and any phase. Results are rounded half-up, saturated to 16
bits and kept at ADC scale: with `cal = 1.0` a sample leaves unchanged, only
widened. The host measures the mismatches, for example with a reference tone
and the capture buffer, and writes the inverse as `cal`.

**Beamforming matrix.** Beam *b* is `Σ_m W[b][m]·x_m`. The products are exact:
16 × 16 bits plus growth, carried at full width. The sum is rounded once by
2^14 and saturated to 18 bits.

* **Sign convention.** The RTL multiplies by `W` as written. In the usual
  notation a combiner applies the conjugate (`wᴴx`), so the host must write
  conjugated weights. For a half-wavelength linear array and a beam at
  sin θ = u, the weights are `W[b][m] = exp(−jπ·m·u)`.
* **Lens-fed receiver.** Each chain already *is* a beam there, because the
  lens forms the beams. Identity weights pass the chains through unchanged.

**Power integrator.** One integrator per beam adds the sample powers
`I² + Q²` over `int_len` words (8·`int_len` samples). At the end of each
interval it presents the sum on `beam_power` with a one-cycle
`beam_power_valid` pulse, then restarts from zero. This is the measurement
behind a beam pattern: rotate the array against a fixed transmitter, and read
one power per beam at each angle. The 64-bit accumulator cannot overflow for
any `int_len`.

**Capture buffer.** A pulse on `cap_arm` records the next 1024 valid words,
that is 8192 samples per channel. The recorded data are the beams
(`cap_src = 0`) or the raw ADC words (`cap_src = 1`, sign-extended to 18 bits).
`cap_busy` stays high during recording. `cap_done` then stays high until the
next arm. The host reads address `cap_rd_addr` one clock later.

* The word presented in the same cycle as `cap_arm` is not stored.
* An arm during a capture restarts it.
* Raw capture is how one chain's spectrum is examined before calibration.

## Transmit path

```
symbols/ftw/amp ─► tx_stream_gen ×4 ─► beamforming_matrix (4×4, per lane) ─► dac[4][8]
                   (QPSK or CW, NCO      (Σ_s F[m][s]·a_s, ÷2^16, sat 14 b)
                    + CORDIC per lane)
```

**Stream generator.** Each stream has a 32-bit NCO. Its frequency is
`ftw/2^32 · fs` and may be negative, giving a tone below the carrier.

* **CW mode** (`tx_mode = TX_CW`): the stream is the tone
  `amp·exp(j·phase)`, one spectral line per stream.
* **QPSK mode:**
  * every `tx_sps` samples one 2-bit symbol is taken;
  * bit 1 gives the sign of I and bit 0 the sign of Q (0 → +amp, 1 → −amp);
  * the symbol is held for the symbol period (rectangular pulse) and rotated
    by the NCO phase, so each stream sits on its own frequency sub-channel.
* **Symbol handshake.** Symbols arrive on a valid/ready handshake per stream.
  `tx_sym_ready` is high in the cycle a symbol is due, and a transfer happens
  when `tx_sym_valid` is also high. If no symbol is offered, a zero symbol is
  sent for that period and `tx_underflow` pulses; the stream stays on its
  symbol grid.
* **Reset behaviour.** Lowering `tx_enable` resets phase and symbol timing.
  Changing `tx_mode` switches immediately.

**CORDIC rotator.** The phase rotation uses a pipelined CORDIC:

* a quarter-turn pre-rotation, so the full circle is covered;
* 16 micro-rotations with `atan(2^-i)` constants in units of 2^-32 turn;
* removal of the CORDIC gain by a multiply with 19898/2^15 ≈ 0.60725.

Its error stays within 3 LSB at 16 bits. One rotator runs per lane, so it sustains
one sample per lane per clock.

**Transmit precoder.** The same `beamforming_matrix` module computes
`dac_m = Σ_s F[m][s]·a_s`:

* Q2.14 weights;
* rounded by 2^16, which is 14 bits of weight fraction plus 2 bits of scale
  from the 16-bit streams to the 14-bit DAC;
* saturated to 14 bits.

A stream of amplitude 32767 with weight 1.0 reaches DAC full scale, 8191.
Four QPSK or CW streams with weights of magnitude ½ cannot clip while `tx_amp` ≤ 11584, because 4 · ½ · √2 · amp / 4 ≤ 8191. When a sum
clips, `tx_dac_sat[m]` pulses. For a stream steered to sin θ = u, the weights
are `F[m][s] = exp(+jπ·m·u)·g`.

## Timing

| path | latency (clocks of fs/8) |
|---|---|
| ADC word → `beam_re/im` | 7 (calibration 3, beamformer 4) |
| ADC word ending an interval → `beam_power_valid` | 9 (7 to the beam, 2 in the integrator) |
| forming clock of a Tx word → `dac_re/im` | 23 (NCO/symbol 1, CORDIC 18, precoder 4) |
| `cap_rd_addr` → `cap_rd_re/im` | 1 |

All paths accept one word per clock and never stall. `adc_valid` may have
gaps, which are carried through as `beam_valid`. Reset is synchronous and
active-low (`rst_n`).

## Number formats

| signal | format |
|---|---|
| ADC word | 12-bit signed integer |
| calibrated sample | 16-bit signed, ADC scale |
| `cal`, `rx_w`, `tx_w` | 16-bit signed Q2.14 (16384 = 1.0) |
| beam sample | 18-bit signed |
| beam power | 64-bit unsigned, sum of I²+Q² |
| stream sample | 16-bit signed, amplitude `tx_amp` (0…32767) |
| DAC word | 14-bit signed |
| NCO phase / `tx_ftw` | 32-bit, 2^32 = one turn |

Rounding is always half-up, followed by saturation. The `rx_cal_sat` and
`rx_beam_sat` flags cannot fire at these widths: 12-bit ADC words times
coefficients below 2 stay within 14 bits, and four of those times weights
below 2 stay within 17 bits. They are kept for builds with other widths.
`tx_dac_sat` does fire when streams overdrive the DACs.

## Files

| file | contents |
|---|---|
| `rtl/mbf_pkg.sv` | sizes, widths, `SPC`, `COEF_ONE`, `tx_mode_e` |
| `rtl/cplx_mult.sv` | pipelined complex multiplier with rounding and saturation (latency 3) |
| `rtl/rx_calibration.sv` | one calibrating multiplier per chain |
| `rtl/beamforming_matrix.sv` | N_OUT × N_IN complex matrix–vector product (latency 4) |
| `rtl/beam_power_integrator.sv` | integrate-and-dump power meter |
| `rtl/cordic_rotator.sv` | pipelined CORDIC phase rotator |
| `rtl/tx_stream_gen.sv` | NCO + QPSK/CW source with symbol handshake |
| `rtl/capture_buffer.sv` | arm/done snapshot memory with a read port |
| `rtl/mbeam_array_processor.sv` | top: the whole node |

Every sub-block is parameterised: channel counts, widths, lanes and depth.
The top's defaults are the configuration above: 4 chains, 4 beams, 4 streams,
8 lanes and a capture depth of 1024. After synthesis the default top has
about 64,000 flip-flops and 1.25 Mbit of capture memory. It uses 288 complex
multipliers, or 1152 real ones:

* receive, per lane: 4 calibration + 16 beam multipliers;
* transmit, per lane: 16 precoder multipliers.

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block
against a model computed independently in the testbench, and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_cplx_mult` | bit-exact products, rounding, saturation, latency 3 |
| `tb_rx_calibration` | bit-exact per-chain correction and latency |
| `tb_beamforming_matrix` | bit-exact matrix product for random weights and data |
| `tb_beam_power_integrator` | power sums for random interval lengths, lanes, gaps in `in_valid` |
| `tb_cordic_rotator` | rotation within 3 LSB over the full circle, latency 18 |
| `tb_tx_stream_gen` | CW and QPSK against a floating-point NCO model; symbol handshake, stalls, underflow |
| `tb_capture_buffer` | arm/busy/done, re-arm, read-back of random data |
| `tb_mbeam_array_processor` | the whole node at default size, described below |
| `tb_beam_pattern` | beam-pattern measurement, described below |
| `tb_link_demo` | two-node link, described below |

**Whole node (`tb_mbeam_array_processor`).** This is the full-size test: the
top at its defaults with no parameter overrides. It checks bit-exact beams
against an integer model and the integrator sums. It makes two captures, one
of beams and one of raw ADC words, and reads both back. It sends CW and QPSK
with a source that sometimes stalls, and DAC words are compared with a
floating-point model within ±3 LSB. It counts each mechanism:

* lens (identity-weight) operation;
* digital beams;
* integrator dumps;
* each capture source;
* CW;
* QPSK;
* mode switches;
* symbol underflow;
* DAC saturation.

Any mechanism that never happened counts as a failure.

**Beam pattern (`tb_beam_pattern`).** A plane-wave tone arrives on the
half-wavelength array from −90° to +90°, and four fixed beams integrate 64
samples each. The measured powers must follow the array factor within 2% of
the peak, and the strongest beam must be the one pointing nearest the source.

**Two-node link (`tb_link_demo`).** Two instances of the top form a link:

* node 1 sends four QPSK streams on four sub-channels, each steered
  differently;
* a channel model gives every chain its own gain and phase error, drops 2 bits
  and adds noise;
* node 2 calibrates each chain and forms four beams.

Every stream must decode without error on its own beam. Each other stream
must leave less than 1% of that energy on the beam.

The RTL also carries assertions for the usage rules. They are checked in
simulation with `--assert` and ignored by synthesis:

* a capture is never both busy and done;
* `tx_amp` is not negative;
* a symbol is offered only in QPSK mode;
* in QPSK mode, `tx_sps` is a non-zero multiple of the lane count.

To run a testbench with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_link_demo \
    -y rtl -y tb +libext+.sv rtl/mbf_pkg.sv tb/tb_link_demo.sv
./obj_dir/Vtb_link_demo
```

The package must come first on the command line. All testbenches take
seconds, the full-size one included.

## What is not here, and where this design chooses for itself

The description this design follows fixes the architecture:

* per-chain calibration by complex multipliers;
* parallel digital beams from the same samples;
* per-beam integration for beam patterns;
* CW tones per transmit chain;
* independent streams on their own sub-channels, steered separately;
* data exchange with a host.

It also fixes the 4-element arrays, the four beams and four streams, the 12-bit
ADCs and 14-bit DACs, and the 1966.08 MSps rate.

It does **not** give the following, so they are this design's own choices:

* the number of samples per clock;
* all internal widths and the Q2.14 coefficient format;
* the rounding and saturation rules;
* latencies;
* the NCO/CORDIC tone generator;
* the QPSK bit mapping, the rectangular pulse and the symbol handshake;
* the underflow rule;
* what the integrator sums (power), and the length of its interval;
* the capture depth and its read port.

Not implemented:

* **Stream synchronisation and decoding on the receiver.** This is
  host-side processing, and no algorithm is specified. The link testbench
  decodes with an ideal, already-aligned correlator.
* **Calibration measurement.** The coefficient is a host-written input; how it
  is measured is up to the host.
* **I/Q-imbalance correction.** Correcting the unwanted sideband would need a
  widely-linear filter (x and x*). Only per-chain complex-gain calibration is
  implemented.
* **Host bus.** The bus to the processor (AXI/DMA) and the register map are
  absent. Configuration is plain input ports, and capture read-out is a plain
  address/data port.
* **RF-side hardware.** The data converters, LO and clocking, RF front-ends,
  lenses and antennas are absent.
* **The cascaded lens array (lenslets).** It is a 16-chain receiver that was
  only simulated in the source description. It needs no new logic:
  `mbeam_array_processor #(.NA(16))` forms its beams with the same matrix, but
  this size has not been simulated here.

The 60 GHz node's sample rate is not stated. The design assumes the same
1966.08 MSps, which also covers the 1.8 GHz of bandwidth per beam quoted for
that node. For the 28 GHz receiver, the per-beam bandwidth appears as both
0.8 GHz and 0.85 GHz; both fit.

One tool warning stands on purpose. Inside `beamforming_matrix`, the `sat`
pin of each full-width multiplier is left unconnected, because a full-width
product cannot clip.
