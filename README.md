# LR-FHSS transceiver in SystemVerilog

This is a synthesizable model of a long-range frequency-hopping (LR-FHSS) transmitter and receiver for IoT devices that talk directly to a low-earth-orbit satellite. An LR-FHSS packet is cut into short bursts ("hopping blocks"). Each burst is sent at 488.28 symbols/s with GMSK modulation on a different narrow channel:

- A few copies of a **header block**: 114 symbols, consisting of a 2-symbol preamble, the 32-symbol syncword `0x2C0F7995` and 80 convolutionally coded header bits.
- Then the **payload blocks**: 50 symbols each, consisting of a 2-symbol preamble and 48 coded payload bits.

Seen from the satellite, each burst has these impairments:
- an unknown carrier phase;
- a carrier frequency offset (CFO);
- a Doppler shift that changes linearly during the packet (a Doppler *rate* of up to ±400 Hz/s);
- a sampling-phase offset.

The receiver has to find headers among thousands of channels, estimate all of these impairments from the header, decode the header, and then decode the payload blocks using the header's estimates.

The central idea of the receiver is a **phase-tracking soft-output trellis search (SOVA)**:
- It needs only four states, because the GMSK phase is first "unwrapped" by a known rotation.
- Every state carries its own estimate of phase, frequency and Doppler.
- For the header, the search runs over eleven Doppler-rate hypotheses.
- The search runs forward and backward from the middle of the header, so the estimates start where they are most accurate.

## Contents

| Part | Module(s) |
|---|---|
| Shared types, constants, CORDIC, tables | `lrfhss_pkg` |
| Transmitter | `lrfhss_tx`, with `crc8_unit`, `crc16_unit`, `dewhitener` (as whitener), `conv_encoder`, `interleaver`, `tx_framer`; `gmsk_mapper` |
| Channelizer | `channelizer` (windowed FFT filter bank, uses `fft_iter`) |
| Header detector | `header_detector` (uses `fft_iter`, `peak_interp`) |
| Header receiver | `header_receiver`: `cfo_correct`, `lpf`, `symbol_timing_est`, `timing_correct`, `phase_rotate`, `cfo_phase_est`, `header_sova` (uses `sova_core`), `hdr_deinterleaver`, `viterbi_dec`, `crc8_unit`, `header_decoder` |
| Payload receiver | `payload_receiver`: `cfo_correct`, `lpf`, `timing_correct`, `phase_rotate`, `cfo_phase_est`, `payload_sova` (uses `sova_core`), `pld_deinterleaver`, `depuncture`, `viterbi_dec`, `crc16_unit`, `dewhitener` |
| Top | `lrfhss_top` |

Every file opens with a comment on what the module does, how it does it, its handshake and its timing.

## Number formats

- **Complex samples** (`cplx_t`): 16-bit signed I and Q. The transmitter's GMSK amplitude is 4096.
- **Phases**: `phase_t` is 16 bits and `ph32_t` is 32 bits; in both, the full range equals 2π.
- **Frequencies and rates**: also in `ph32_t` units, per sample (or per symbol inside the SOVA) and per sample².
- **Soft bits** (`llr_t`): 8-bit signed; positive means bit 1.
- **CORDIC**: all rotations, `e^{jθ}` and `atan2` use one 14-iteration CORDIC, written as package functions (`cplx_rot`, `expj`, `atan2_ph`). There are no trigonometric ROMs.

## The signal model the receiver relies on

Bit 1 is the symbol a = +1 and bit 0 is a = −1. The phase at symbol instant k is:

    φ(k) = π/2 · Σ_{i ≤ k−2} a_i  +  3π/8 · a_{k−1}  +  π/8 · a_k

Each symbol turns the phase by ±90°, spread over two symbol periods.

The mapper produces two samples per symbol:
- sample 2k+1 at the symbol instant;
- sample 2k halfway between φ(k−1) and φ(k).

No Gaussian pulse is applied, which is a simplification. The receiver works on the same two-samples-per-symbol stream.

**Phase rotation.** Multiplying sample k by e^{jkπ/2} (`phase_rotate`, an exact swap and negation of I/Q) turns the running sum into π times the number of +1 symbols. The accumulated phase then takes only two values, so a trellis state is just (parity b, previous symbol a₁). The expected branch phase is:

    θ = π·b + 3π/8·a₁ + π/8·a

All eight possible branch phases are multiples of 45°. That is why `sova_core` needs only a cosine/sine table of eight entries.

## Detection: channelizer and header detector

**Channelizer.** The channelizer splits the wideband input with a Hann-windowed 4096-point FFT at 50 % overlap:
- Odd bins are negated on odd hops, to undo the half-frame time shift.
- It streams out 3120 channels of 488.28 Hz (channel c is bin c − 1560).
- Each FFT frame gives one sample of every channel. Two frames per symbol give the two samples per symbol the receivers expect.

**FFT.** `fft_iter` is a radix-2, in-place, decimation-in-time FFT:
- It performs one butterfly per clock, so one transform takes log₂N · N/2 clocks.
- Twiddle factors come from the CORDIC.
- Each stage halves the result, so the output is DFT/N.

**Header detector.** It watches one channel's sample stream:
1. For each new sample, it multiplies the last 64 half-symbol samples by the conjugate of the known preamble+syncword phase trajectory (the coefficients c_k). This removes the modulation, leaving only a tone at the residual CFO.
2. It zero-pads the product to 128 points and runs an FFT.
3. It declares a header when the peak of |X|² exceeds a fixed fraction of the window energy.
4. Among detections within a 64-sample hold-off, the window with the largest peak is taken as the header position.

The peak bin and its two neighbours go to `peak_interp`, which computes the fine CFO:
- the smaller neighbour is selected;
- a = P₀ − P_small and b = P₊₁ − P₋₁;
- fraction = atan(b/a) · (1/2)/(π/4), in [−½, ½] of a bin;
- result = fraction + index − 64.

The CFO resolution before interpolation is 976.5625/128 Hz per bin.

## Header receiver

The header receiver takes 229 samples from the detected position. It first filters them:

1. **`cfo_correct`** removes the detector's CFO. It is a 32-bit NCO whose frequency can also ramp, which the payload receiver uses for Doppler.
2. **`lpf`** is a short 1-6-1 FIR.
3. The filtered samples are stored so they can be replayed.

**Timing.** `symbol_timing_est` decides which of the two samples per symbol is the symbol instant:
- For each sampling phase it correlates the differential products r[2k+p]·r*[2k−2+p] with the known phase steps of the syncword.
- It uses only the 20 syncword positions {5…15, 18…26}, where the phase moves enough to be informative.
- The phase with the larger correlation magnitude wins.
- `timing_correct` then keeps one sample per symbol.

The stored samples are then replayed through `phase_rotate` into two units at once:

**`cfo_phase_est`** rotates each known symbol by minus its expected rotated phase. The result is a clean phasor whose angle drifts with the residual frequency. From the 34 known symbols it gives:
- the phase at the middle of the header;
- the residual CFO.

**`header_sova`** runs `sova_core` over the 114 symbols for each of 11 Doppler-rate candidates (−400 … +400 Hz/s in steps of 80 Hz/s):
- forward from symbol 58 to 114;
- backward over symbols 57 down to 0. It uses the complex conjugates of those samples, which form an ordinary GMSK signal of the time-reversed symbols (delayed by one), so the same core serves both directions.

Starting at the middle puts the start of each search where the estimates from the known part are most accurate.

**Per-candidate correction.** The starting phase and frequency given to each candidate are corrected for that candidate's rate. The estimates are straight-line fits centred on the known part (symbol 16.5), so a Doppler rate ρ shifts them:
- the phase at symbol 57 by ρ·(57 − 16.5)²/2;
- the frequency by ρ·(57 − 16.5).

Without this correction, the right candidate loses at high Doppler.

**Candidate selection.** The candidates are ranked by their final best path metric. The soft outputs of the three best candidates are kept and tried in turn:
1. `hdr_deinterleaver` (the paper's 80-entry order);
2. a tail-biting `viterbi_dec` (the 40 steps are fed twice and the last 40 decisions are kept);
3. `crc8_unit` plus `header_decoder`.

The first candidate whose CRC passes is used.

The header receiver hands the payload receiver:
- the payload information (length, rate, hopping sequence, number of blocks);
- the CFO and Doppler rate at a reference sample;
- the sampling phase.

### Inside `sova_core`

Every state holds, alongside its path metric:
- the phase φ_p;
- the frequency φ_f;
- the Doppler shift φ_ds;
- the Doppler rate φ_dr.

For each of the two predecessors t of a state, and the received sample r:
- the branch metric is Re{r · e^{−j(φ_p[t] + θ)}};
- the phase error perr is the imaginary part of the same product.

The path with the larger total metric wins. The state then inherits the winner's estimates, updated as follows:

    φ_dr += uc·perr;  φ_ds += φ_dr;  φ_f += ub·perr;  φ_p += φ_ds + φ_f + ua·perr

Outputs:
- Each state has a 32-deep hard survival path. The absolute metric difference of the two competing paths is stored as that decision's soft reliability.
- The oldest decision of the currently best state is released each step. Remaining decisions are flushed at the end.

The loop gains ua/ub/uc are inputs. The top's defaults (3000/100/5) were chosen by simulation.

## Payload receiver

Each payload block is 101 samples. Each block goes through:
1. `cfo_correct`, with a start frequency of f_header + ρ · offset, where offset is the block's time from the header reference sample; the frequency keeps ramping at rate ρ;
2. the LPF, timing selection and phase rotation;
3. a phase estimate from the two preamble symbols;
4. one forward SOVA pass.

After the last block, the soft bits go through:
- the stride-48 deinterleaver;
- the depuncturer, which puts zero soft bits where the transmitter dropped coded bits;
- a zero-tailed Viterbi decoder;
- the CRC-16 check;
- the dewhitener.

Output bytes appear on `byte_valid`/`out_byte`, with `crc_ok` at the end.

## Coding

| Element | Choice |
|---|---|
| Mother code | Rate 1/3, constraint length 7, generators 133/171/165 (octal) |
| Payload rates | 1/2, 2/3 and 5/6, by puncturing |
| Header | Rate 1/2, tail-biting |
| Payload termination | Zero-tailed (6 tail bits) |
| Header CRC | CRC-8 (0x2F) over the 32-bit PHDR |
| Payload CRC | CRC-16 (0x755B, init 0xFFFF) over the payload bytes |
| Whitening | 8-bit LFSR (x⁸+x⁶+x⁵+x⁴+1, seed 0xFF) |
| Payload interleaving | Coded bit j goes to block j mod n, position j div n |
| Payload block count | ceil(coded bits / 48) |

The header decoder rejects a header that:
- has a bad CRC;
- uses a modulation other than GMSK;
- needs more than 52 blocks.

## Top level and its interfaces

`lrfhss_top` instantiates the transmitter, the GMSK mapper, the channelizer, the header detector and both receivers. Three parts of a full system are not designed here, so their connections are ports:

- **Wideband ADC stream.** `wb_*` goes in; `ch_*` (channel samples, channel index, hop strobe) comes out of the channelizer. In a full system, these channel samples would be written to a large external memory.
- **Header path from that memory.** The `det_in_*` stream goes to the header detector. `hr_start` and the `hr_in_*` stream, read from the detected position, go to the header receiver.
- **Payload path from that memory.** `pr_start`, plus `pr_blk_start`/`pr_blk_offset` and the `pr_in_*` stream for each block, go to the payload receiver.

All streams use valid/ready handshakes.

The transmitter side:
- takes packet bytes on `tx_byte*`;
- produces the symbol bits of each hopping block;
- produces the GMSK samples on `tx_sample*`, with block flags (`tx_blk_first`, `tx_blk_hdr`, `tx_blk`).

Channel hopping (selecting the RF channel per block) is outside, in the RF front end.

Synthesis of the top with yosys gives roughly:
- 15 k cells;
- 27 k flip-flop bits;
- 326 kbit of memory (mostly the 4096-point FFT buffer and the sample stores).

## Simulating

Every block except `payload_sova`, `header_receiver` and `payload_receiver` has a self-checking bench `tb/<module>_tb.sv` that prints `TB_RESULT checks=… failures=…`. Those three are exercised only through the end-to-end benches below. For example:

    verilator --binary --timing rtl/lrfhss_pkg.sv rtl/*.sv tb/viterbi_dec_tb.sv --top-module viterbi_dec_tb

Remove the duplicated `lrfhss_pkg.sv` from the glob, or list the files explicitly.

**End-to-end benches.** `tb/lrfhss_top_tb.sv` (64-point channelizer) and `tb/lrfhss_top_full_tb.sv` (the default 4096-point / 3120-channel top) send nine packets:
- all four code rates;
- 1–4 header copies;
- lengths of 8–20 bytes;
- CFOs of −55…+37 Hz;
- Doppler rates of −160…+160 Hz/s.

Each block gets its own random phase, plus noise. Three of the packets damage a block on purpose:
- one destroys a header, which must be rejected;
- one destroys a payload block at rate 1/3, which the code must correct;
- one destroys a payload block at rate 5/6, where the CRC must fail.

Each bench counts every mechanism (detections, Doppler candidates, each code rate, CRC passes and failures, channelizer hops) and fails if one never happens. Each takes about 15 s in Verilator.

## Known limitations and departures from the published design

- **Payload SOVA margin.** The end-to-end benches pass every check (every packet with an intact header is recovered, including one with a destroyed payload block). The payload SOVA has not been characterised under noise or timing errors beyond those cases. Each payload block's start phase comes from only two preamble symbols, so this is the first place to look if payload errors appear at low SNR.
- **Timing correction.** The sampling phase is chosen among two samples per symbol. No fractional interpolator is used.
- **No transmit pulse shaping.** The GMSK mapper uses the symbol-instant phases and linear midpoints, not a Gaussian-filtered pulse.
- **Design choices where the published description gives no details:**
  - the sizes of the FFTs and detector window;
  - the filter taps;
  - the CRC polynomials, whitening sequence, code generators and puncturing patterns;
  - the header field layout;
  - the Doppler-candidate spacing;
  - the loop gains.

  These follow common LR-FHSS practice or are simply reasonable choices. Each module's opening comment says which of its details these are.
- **Not included:**
  - the external memory that stores channel samples by frequency and by time, and the payload buffer that reads hopping blocks back from it;
  - the hopping-sequence generator;
  - the microcontroller, its memories and peripherals;
  - the RF/analog parts.

  The top brings their connections out as ports.
