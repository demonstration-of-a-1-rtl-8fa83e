# Always-on FDMA mesh node: 2x2 MIMO 16-QAM transmitter and three-band receiver

Four drones form a complete graph: every node talks to every other node at
the same time, all the time. There is no time slotting and no RF switch.
Each node transmits in its own frequency band. Each of its two receive
antennas samples the whole shared band, so all three neighbours arrive in
one complex stream. The separation is digital: one mixer and low-pass filter
per neighbour pulls each band down to 0 Hz, and a full receiver runs on
each band in parallel. Twelve links of about 100 Mbit/s give about
1.2 Gbit/s for the network.

This repository holds the programmable-logic datapath of one node as
synthesizable SystemVerilog. It is a single 200 MHz clock domain with one
complex 16-bit sample per clock per antenna. It contains:

- one 2x2 MIMO transmitter: payload bytes in, two antenna sample streams out;
- three 2x2 MIMO receivers: two antenna sample streams in, payload bytes and
  link statistics out per band;
- an AXI4-Stream switch that merges the three decoded byte streams.

The RF data converters are outside this design, along with their
decimation and interpolation, the DMA engine, the processor and the
analogue front end. The design sees complex baseband samples at 200 MHz
on `dac[]` and `adc[]`. The processor's registers appear as plain
configuration inputs.

## Rates and band plan

| quantity | value | how it is obtained |
|---|---|---|
| clock / sample rate | 200 MHz, complex | one sample per clock per antenna |
| samples per symbol (SPS) | 8 | fixed in `mesh_pkg` |
| symbol rate | 25 Mbaud | 200 MHz / 8 |
| modulation | Gray-coded 16-QAM, 4 bit/symbol | 100 Mbit/s raw per link |
| pulse | square-root raised cosine, roll-off 0.5, 65 taps | occupied band 25 x 1.5 = 37.5 MHz |
| band centres | -75, -25, +25, +75 MHz (assumed plan) | NCO word = f / 200 MHz x 2^32 |

The original system runs 24.96 Mbaud (99.84 Mbit/s in 37.44 MHz). This
design uses the nearest rate that divides the 200 MHz clock evenly, which
is 0.16 % faster. The band centres are run-time inputs (`tx_freq`, and
`rx_freq[b]` per receive band). The 50 MHz spacing leaves 12.5 MHz between
occupied bands for the receive low-pass filters. Example NCO words are
+25 MHz = `0x2000_0000` and -25 MHz = `0xE000_0000`.

Every NCO multiplies by exp(+j 2 pi f t). The transmitter therefore uses
the band centre itself. A receive branch uses minus the band centre: to
bring a node transmitting at +25 MHz down to 0 Hz, set `rx_freq[b]` to
`0xE000_0000`.

## The frame

Each transmitted frame is a fixed sequence of sections. The receiver
counts through the same sequence.

| section | symbols | content | antennas |
|---|---|---|---|
| preamble | 512 | BPSK chips of a length-512 Golay sequence, sent time-reversed | both, same chip |
| training 1 | 64 | BPSK, length-64 Golay sequence (training table) | antenna 1 only |
| training 2 | 64 | the same 64 chips | antenna 2 only |
| pilots | 32 | QPSK, bit pairs of the training table | both |
| header | 8 | 16-QAM: length (2 bytes), sequence number (2 bytes), low byte first | both |
| payload | 2 L | 16-QAM, one byte per two symbols, high nibble first | both |
| CRC | 8 | CRC-32 over header and payload, least significant byte first | both |
| gap | 16 | silence | - |

The 512-chip preamble is 64 bytes. BPSK, QPSK and training symbols use
amplitude 3 QS on each axis, with QS = 2048. The 16-QAM levels are +-1 and
+-3 QS. The Gray code on each axis is 00 -> -3, 01 -> -1, 11 -> +1 and
10 -> +3, with bits [3:2] on I and bits [1:0] on Q.

The CRC is the Ethernet CRC-32: reflected polynomial 0xEDB88320, initial
value all ones, final inversion.

**Test pattern.** For bit-error counting, the payload is a PRBS-15
(x^15 + x^14 + 1) byte stream. It restarts from the all-ones state in
every frame. Each byte is the low 8 bits of the register after 8 shifts.
The receiver's BER counter assumes this pattern, so feed it as the payload
when measuring BER.

**Data on two antennas.** During data, both antennas send the same
symbol. The link is one stream: 99.84 Mbit/s is one 24.96 Mbaud 16-QAM
stream, not two. The 2x2 arrangement therefore gives diversity.

The receiver sees each antenna through g_r = h_r1 + h_r2, the sum of the
two transmit paths. It combines the two receive antennas by maximum-ratio
combining (MRC).

**Why training has two intervals.** Each antenna trains alone, so the
receiver can measure all four channel paths h_rt. The four estimates are
reported in the statistics. Combining only needs their sums g_r.

## Transmitter (`tx_chain`)

```
bytes -> sync_fifo -> tx_controller -> frame_gen -> qam_mapper -> mimo_tx -> packetizer
              (preamble_lut, training_lut)                                      |
dac[a] <- nco_mixer <- gain_stage <- srrc_filter (65 taps) <- upsampler (x8) <--+
```

**Symbol tick.** The packetizer makes a one-in-8 clock tick. Everything
in the symbol-rate front end advances on that tick.

**Frame start.** The controller starts a frame only when the payload FIFO
already holds `pay_len` bytes, so a frame does not normally run dry
halfway. `underrun` pulses if a payload byte is needed while the FIFO is
empty. That should never happen, and the tests check that it does not.

**Symbol requests.** `frame_gen` turns (section, index) into a symbol
request, which is a kind plus bits. It pops a FIFO byte every second
payload symbol and updates the CRC.

**Mapping.** `qam_mapper` maps each request to a constellation point.
`mimo_tx` routes the point to the antennas, muting one antenna in each
training interval. It substitutes preamble chips during the preamble.

**Pulse shaping.** The upsampler inserts 7 zeros after each symbol. The
65-tap SRRC has a centre tap of about 1.0 in Q1.15, so a symbol comes out
at its own amplitude.

**Gain and upconversion.** The gain stage multiplies by `gain` in Q4.12,
where 4096 is unity. It saturates.

The NCO mixer uses a 32-bit phase accumulator and a 1024-entry sine table
(`rtl/sin_lut.hex`):

- entry i is round(32767 sin(2 pi i / 1024));
- it is read at the top 10 phase bits.

**Latency.** From a symbol's tick to `dac[]` takes about 4 symbols plus 9
clocks.

## Receiver, per band (`mesh_node` branch + `rx_chain`)

```
adc[a] -> nco_mixer(rx_freq[b]) -> lpf_cascade (2 x 63 taps) -> rx_chain:
  power_meter, srrc matched filter -> energy_detector -> downsampler (/2)
  -> gs_correlator -> timing_acq -> chan_est -> mimo_mrc -> lms_equalizer
  -> qam_demapper -> rx_deframer -> bytes
                   + noise_meter, power_meter, evm_meter, ber_counter
```

**Band selection.** The band-selection filter is two identical 63-tap
linear-phase FIRs in cascade. Each is a Kaiser-windowed sinc (beta 6) with
its cut-off at 25 MHz. The cascade squares the stop-band rejection. The
coefficients are listed with their formula in `rtl/filt_coef_pkg.sv`.

**Matched filter.** The matched filter reuses the SRRC coefficients. It
shifts by 18 instead of 15, which takes the extra pulse energy back off.

### Synchronization (the part that needs the most care)

**Energy detector.** This block keeps a running sum E, over the last 4096
samples (the length of the preamble), of |re| + |im| of both antennas.

- It uses magnitudes, not powers, so no multipliers are needed.
- E is the reference level for the detector's threshold. Detection
  therefore follows the received level rather than a fixed number.

**Golay correlator.** After decimation by 2 (4 samples per symbol), each
antenna runs an efficient Golay correlator (`golay_egc`).

A 512-chip Golay sequence comes from 9 steps of the recursion
a_k = [a_{k-1}, b_{k-1}], b_k = [a_{k-1}, -b_{k-1}]. Correlating with it
needs only 9 delay-and-add stages, with delays of 4, 8, ... 1024 samples,
instead of 512 taps.

The preamble is sent time-reversed, so this structure is its matched
filter. The output peaks on the last preamble chip at 512 times the chip
amplitude.

The metric M is the sum over antennas of |Re c| + |Im c|. Combining is
non-coherent, so the unknown channel phase does not matter.

**Detection rule.**

    flag = (128 * M >= thr * E) and (E >= emin)

A clean preamble gives M = 512 x (mean level per sample), and E is 4096
times the same level. The rule is therefore M / (ideal peak) >= thr / 16:

- thr = 16 is used in all tests;
- thr = 8 can trip on partial overlaps early in a preamble, while the
  energy window still holds mostly noise.

Because M and E look at the same span, the ratio stays bounded when a frame
ends. `emin` keeps noise and silence from triggering. Set it a few times
above the noise floor's E. The tests use 2,000,000 with noise of about
+-30 LSB.

**Timing acquisition.** `timing_acq` keeps a 3-sample moving sum of M.

1. On the first flag, it watches the next 10 samples and picks the largest
   moving sum. The peak, which is the last preamble chip, is the middle of
   that window.
2. From then on it takes every fourth sample, starting one symbol after
   the peak, from a 16-sample delay line. The symbols that arrived during
   the search are therefore not lost.
3. It labels each symbol TR1 / TR2 / pilot / data with an index.
4. It keeps going until the deframer signals the end of the frame. Then it
   re-arms.

There is no timing or frequency tracking after acquisition. The
transmitter and receiver clocks are assumed locked, as they are in
simulation; see "Departures".

### Channel estimate, combining and equalization (fixed point)

**`chan_est`.** For each receive antenna r and training interval t, it
correlates the 64 symbol samples with the known ±1 chips and divides by
64. The result is h_rt, the channel times the training amplitude 3 QS.

It reports g_r = h_r1 + h_r2. The sample at the timing peak is the
dominant channel tap, so only that tap is estimated. The rest is left to
the equalizer.

**`mimo_mrc`.** It computes

    z = (sum_r conj(g_r) x_r) * inv >> 30
    inv = floor(3 QS * 2^30 / sum_r |g_r|^2)

This co-phases and weights the antennas and restores the constellation
scale, so a +3 level comes out as 3 QS.

`inv` comes from a 48-cycle restoring divider (`seq_divider`) that starts
at the end of training. Output resumes from about the sixth pilot.

**`lms_equalizer`.**

- Structure: a 5-tap complex symbol-spaced FIR with Q2.14 taps. It starts
  as identity and is reset at every frame.
- Adaptation: least mean squares, w_k += e conj(z_{n-k}) >> 18.
- Reference: the known QPSK pilots during the pilots, then its own 16-QAM
  decisions.
- Output: each symbol leaves two symbols later (centre tap). Hold `adapt`
  low to freeze the taps.

**Demapper.** `qam_demapper` makes hard decisions with boundaries at 0 and
±2 QS.

### Deframing and link metrics

**`rx_deframer`.** It reads the header, sends the payload as bytes with
`m_last` on the last byte, and checks the CRC. Frames with a length of
zero or above `MAX_LEN` are ended at once as bad.

**Buffering.** Each band's bytes go into a 4096-byte FIFO. When the FIFO
is full, bytes are counted in `rx_drops[b]` instead of stalling the radio.

**Statistics.** Each band's statistics (`rx_stat_t`) hold the following
fields.

| field | meaning |
|---|---|
| `in_power[a]` | mean \|x\|^2 at the matched-filter input, 64-sample windows |
| `sym_power` | mean \|y\|^2 of equalized payload symbols (64-symbol windows) |
| `noise_power` | mean \|y - decision\|^2 of payload symbols; SINR = sym_power / noise_power |
| `evm2` | per frame, 2^16 x sum\|y - d\|^2 / sum\|d\|^2 (EVM% = 100 sqrt(evm2 / 65536)) |
| `ber_errors`, `ber_bits` | bit errors against the PRBS-15 pattern, bits compared |
| `frames_ok`, `frames_bad`, `syncs` | CRC-good and bad frames, acquisitions |
| `last_seq`, `last_len`, `last_crc_ok` | header sequence number, payload length and CRC result of the latest frame |
| `h[r*2+t]` | channel estimate of the latest frame |

`rx_clear` zeroes the counters.

### Output switch

**`axis_switch`.** It merges the three band streams into one AXI4-Stream.
Arbitration is round-robin. Each grant is held until `tlast`, so packets
never interleave. `tid` carries the band number.

## Top-level interface (`mesh_node`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | 200 MHz clock, synchronous active-high reset |
| `tx_enable`, `tx_pay_len` | in | transmit on, payload bytes per frame (1..8192) |
| `tx_gain` | in | Q4.12 transmit gain, 4096 = unity |
| `tx_freq`, `rx_freq[3]` | in | NCO words: own band centre; minus each receive band's centre |
| `rx_thr`, `rx_emin` | in | detection threshold (16 recommended) and minimum energy |
| `rx_adapt`, `rx_clear` | in | LMS adaptation on; clear statistics |
| `s_axis_*` | in | payload bytes (valid/ready) |
| `dac[2]`, `adc[2]` | out/in | complex 16-bit samples, one per clock per antenna |
| `m_axis_*` | out | decoded payload bytes, `tlast` per frame, `tid` = band |
| `tx_frame_start/end`, `tx_underrun`, `tx_seq` | out | transmitter status |
| `rx_stat[3]`, `rx_drops[3]` | out | per-band statistics and dropped bytes |

**Parameters.**

- `TX_FIFO_DEPTH` and `RX_FIFO_DEPTH` default to 4096.
- `MAX_LEN` defaults to 8192.
- Frame-section lengths, SPS, QS and the number of bands are constants in
  `mesh_pkg`.
- Filter coefficients are in `filt_coef_pkg`.

**Synthesis.** Generic synthesis of the top gives about 53,000 flip-flop
bits and 1.05 Mbit of memory. The memory is FIFOs, correlator delay lines
and energy windows. The delay lines and energy windows have no reset so
that they can map to RAM. Timing at 200 MHz has not been checked on a
device.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

- **`tb_mesh_node` (end to end, full size).** One transmitter at +25 MHz
  sends three 48-byte PRBS frames through a 2x2 complex channel. The
  channel has a 0.15 echo one symbol later and uniform noise. The receiver
  demodulates it on two bands tuned to that signal and on one band tuned
  to an empty 50 MHz slot. It checks:
  - every payload byte and `tlast`;
  - CRC-good counts and zero bit errors;
  - EVM below 10 % (measured about 5 %);
  - that the empty band stays silent;
  - switch handovers under random back-pressure.
- **`tb_rx_chain`.** The transmitter is connected straight to one band
  receiver through a 2x2 channel with a 0.25 echo and a 3-sample delay. It
  checks that there is no acquisition on noise and that all frames decode
  with zero bit errors. It also checks the EVM, the SINR and the direction
  of each channel estimate.
- **`tb_tx_chain`.** It checks:
  - frame strobes and sequence numbers;
  - the exact frame length;
  - one antenna at a time during training;
  - silence between frames.
- **Unit testbenches.** Each one compares its module against a model of
  the same arithmetic written independently in the testbench. For example:
  - `tb_gs_correlator` correlates directly over 512 taps and compares every
    sample;
  - `tb_mimo_mrc` is a bit-exact combiner model;
  - `tb_lpf_cascade` models both 63-tap stages bit for bit on random
    full-scale samples;
  - `tb_ber_counter` runs its own bit-serial PRBS;
  - `tb_rx_deframer` computes the CRC bit by bit;
  - `tb_lms_equalizer` has an ISI channel that must be equalized.

**Running a testbench.** Run from the repository root, because the NCO
reads its sine table from `rtl/sin_lut.hex`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/mesh_pkg.sv rtl/filt_coef_pkg.sv tb/tb_mesh_node.sv \
        --top-module tb_mesh_node -Mdir obj_tb_mesh_node
    ./obj_tb_mesh_node/Vtb_mesh_node

Replace `tb_mesh_node` with any other testbench name. The end-to-end
testbench simulates about 100,000 clocks in well under a minute.

## Departures from the original system and open points

**Symbol rate.** It is 25 Mbaud instead of 24.96 Mbaud (see above), a
0.16 % rate difference.

**Choices the original description leaves open.** The following are this
design's own choices:

- band plan;
- frame-field lengths other than the 64-byte preamble;
- header layout and CRC polynomial;
- training and pilot sequences;
- filter orders and coefficients of the band filters;
- detection rule and threshold scaling;
- moving-average length and search window;
- equalizer size and step size;
- fixed-point widths.

**Dominant-tap normalization.** It is taken as the single tap at the
timing peak.

**Data on two antennas.** Both antennas carry the same symbol. The rate
quoted is that of one stream.

**Not included.** These are outside this design:

- carrier frequency offset correction;
- timing drift tracking;
- automatic gain control.

The simulations use locked clocks. Over the air, a residual offset would
rotate the constellation during long frames. The LMS equalizer tracks slow
phase rotation only within its step size.

**Placement of the equalizer.** The LMS equalizer sits between MRC and
demapping. It is trained on the pilots.

**Outside this design.** The data-converter tiles and their decimators and
interpolators are not here, nor are the DMA engine, the processor, its
register bank and the RF front end. Their places are taken by the ports
listed above.

**4K video.** Uncompressed 4K video at a normal frame rate needs about
3 Gbit/s, 30 times one link's rate. One link carries roughly one
uncompressed 4K picture per second. Nothing in this design limits the
application; the rate is what it is.

## Files

| file | content |
|---|---|
| `rtl/mesh_pkg.sv` | constants, sample and status types, Golay/CRC/PRBS/Gray functions |
| `rtl/filt_coef_pkg.sv` | SRRC and band-filter coefficients with their formulas |
| `rtl/sin_lut.hex` | 1024-entry sine table for the NCOs |
| `rtl/mesh_node.sv` | top: transmitter, three band branches, FIFOs, switch |
| `rtl/tx_chain.sv` and its blocks | `sync_fifo`, `tx_controller`, `frame_gen`, `training_lut`, `preamble_lut`, `qam_mapper`, `mimo_tx`, `packetizer`, `upsampler`, `srrc_filter`, `fir_filter`, `gain_stage`, `nco_mixer` |
| `rtl/rx_chain.sv` and its blocks | `lpf_cascade`, `power_meter`, `energy_detector`, `downsampler`, `gs_correlator`, `golay_egc`, `timing_acq`, `chan_est`, `mimo_mrc`, `seq_divider`, `lms_equalizer`, `qam_demapper`, `rx_deframer`, `noise_meter`, `evm_meter`, `ber_counter` |
| `rtl/axis_switch.sv` | packet round-robin AXI4-Stream switch |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
