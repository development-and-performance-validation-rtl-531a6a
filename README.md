# Dual-IF VLBI digital backend: channeliser, 2-bit requantiser and Mark5B formatter

A VLBI station records its sky signal as many narrow baseband channels,
coarsely quantised and time-stamped, so that recordings from distant
telescopes can later be cross-correlated. This RTL is the FPGA part of such a
recorder front end, modelled on a backend built around the CASPER ROACH2 board
(a Virtex-6 FPGA with a 5 GS/s ADC card, a PowerPC control processor and
10GbE ports). It takes two intermediate-frequency (IF) signals, each 512 MHz
wide and sampled at 1024 MHz with 8 bits, and:

1. splits each IF into 16 real baseband channels of 32 MHz (sampled at 64 Msps),
2. picks any 16 of the resulting 32 channels,
3. requantises each to 2 bits with a threshold that tracks the channel's power,
4. packs the result into Mark5B frames time-stamped from a 1 PPS reference,

which gives a 2.048 Gbps stream for a 10GbE link to the recorder.

The design follows a published description of that backend (block diagram,
channel plan, threshold rule, frame format, PPS synchronisation). Where the
description stops short (filter-bank internals, word widths, header bit
positions, register map) the choices made here are stated below and in the
opening comment of each file.

```
          8 lanes x 8 bit, 128 MHz                        16 x 18 bit, 64 Msps
 IF1 ADC ───────────────► ddc (PFB UP, PFB DOWN, USB) ──┐
                                                         ├─► channel_select ─► 16 x two_bit_quantizer ─► mark5b_formatter ─► 32-bit words
 IF2 ADC ───────────────► ddc (PFB UP, PFB DOWN, USB) ──┘      (32 → 16)        (threshold_estimator)        ▲       (to 10GbE)
                                                                                                              │
 host bus ─► sw_regs ── channel map, time word, header fields, arm ───────────────► time_formatter ◄── 1 PPS
```

Everything runs on one clock, the ADC fabric clock of 1024 MHz / 8 lanes =
128 MHz, with a synchronous active-high reset.

## Channelisation: two offset filter banks and a real-output converter

This is the least obvious part of the design and is worth reading first.

### The critically sampled filter bank (`pfb_fir`, `fft_wideband_real`, `pfb_casper`)

A polyphase filter bank (PFB) with a 32-point real transform divides
0–512 MHz into 16 channels 32 MHz apart. Each 32-sample frame `m` is
weighted by a 4-frame-long window `h` (128 coefficients) folded onto the
32 branches,

    y_m[n] = Σ_{t=0..3} h[(3-t)·32 + n] · x[(m-t)·32 + n],   n = 0..31

and transformed, `X_m[k] = Σ_n y_m[n] e^{-j2πkn/32}`, k = 0..15. Channel
`k` is centred on k·32 MHz and its complex output `X_m[k]` arrives once per
frame: 32 Msps, exactly the channel width (critical sampling).

The window is a Hamming-weighted sinc whose main lobe is scaled by 0.875,
the pass-band factor listed in the backend's specification, in Q15.
The frame arrives as four clocks of 8 lanes; the FIR processes 8 branches per
clock, and the transform engine computes 4 of the 16 bins per clock as a
direct DFT with Q14 constant twiddles, so a new frame is accepted every 4
clocks without stalls. (The original uses CASPER library blocks whose
internals are not described; the direct DFT is the simplest structure with
the same function and throughput.)

### Doubling the rate: the DOWN bank

VLBI recorders expect *real* baseband channels, sampled at twice their
bandwidth: 64 Msps for 32 MHz. A critically sampled bank gives only 32 Msps
complex. The design therefore runs a second, identical bank (`DOWN`) on the
same IF delayed by half a frame (16 samples = `DOWN_DELAY` = 2 clocks).
Its frames fall half-way between those of the `UP` bank, so interleaving
`D_m, U_m, D_{m+1}, …` gives each channel a complex stream at 64 Msps.

A half-frame shift of the analysis window rotates bin `k` by
`e^{-jπk} = (−1)^k`: the two banks' outputs differ by 180° in odd channels.
`usb_converter` undoes this by negating odd channels of the DOWN bank before
interleaving.

### Complex to real: upper sideband (`usb_converter`)

The interleaved complex stream `z[n]` occupies −16…+16 MHz at 64 Msps. Shifting
it up by a quarter of the sample rate (half the channel width) and keeping the
real part, `r[n] = Re(z[n]·jⁿ)`, places it at 0…32 MHz as a real signal. This
is the same as adding the up-shifted copy and its mirror. Because jⁿ only
takes the values 1, j, −1, −j, no multiplier is needed:

| sample | source | m even | m odd |
|---|---|---|---|
| n = 2m   | DOWN (odd k negated) | +Re | −Re |
| n = 2m+1 | UP                   | −Im | +Im |

So channel `k` carries IF frequencies k·32−16 … k·32+16 MHz, with 0 Hz of
the real baseband at the lower edge k·32−16 MHz (upper sideband). One real
sample per channel leaves every 2 clocks. `ddc` wraps the delay, the two banks
(sharing one frame-phase counter so they stay aligned) and the converter.

The published block diagram draws a Z⁻⁴ on every DOWN input. With 8 lanes per
clock and the 32-point transform that 16 × 32 MHz channels need, 4 clocks is a
whole frame, which would make the DOWN bank a mere copy of the UP bank one
frame late; the stated 180° difference and the doubled rate require half a
frame, i.e. 2 clocks. The default is 2; `DOWN_DELAY` is a parameter.

Latency: the first valid channel samples appear after the 4-frame filter
history has filled; from the last lane group of a frame to its DOWN-derived
output sample is 7 clocks (1 FIR, 5 transform, 1 converter).

## Channel selection (`channel_select`)

The two DDCs give 32 channels: IF1 channels 0–15 are inputs 0–15, IF2
channels 0–15 inputs 16–31. Each of the 16 outputs has its own 5-bit select
register, so any channel may go to any output (a Mark5B frame holds at most 16
channels). The test observation set-up used 13 X-band channels from one IF
and 3 S-band channels from the other. One clock of latency.

## Optimal 2-bit requantisation (`threshold_estimator`, `two_bit_quantizer`)

For a zero-mean Gaussian signal of standard deviation σ, the 2-bit threshold
that puts 32 % of the probability between 0 and H (and between −H and 0) is
H = 0.92 σ. Since the mean is zero, σ² is the average power. Per channel the
estimator

1. sums x² over 2^`WIN_LOG2` samples (default 2¹⁶, about 1 ms),
2. takes the mean P,
3. computes ⌊√P⌋ with a one-bit-per-clock square root (`isqrt`, 18 clocks),
4. sets H = ⌊√P⌋ · 942 / 1024 (0.9199).

H is refreshed at the end of every window, so it follows the input power with
one window of delay; before the first window it is `INIT_THRESH` (256).
Each sample becomes `{mag, sign}` with `mag = |x| > H` and `sign = x ≥ 0`:
the magnitude bit first, then the sign bit. With Gaussian noise about 36 % of
samples have mag = 1.

## Mark5B frames (`mark5b_formatter`)

A frame is 4 header words (16 bytes) followed by 2500 data words (10000 bytes).
Word 0 is sent first; bit 31 is the most significant.

| word | bits 31 … 0 |
|---|---|
| 0 | sync word `0xABADDEED` |
| 1 | [31:28] years since 2000, [27:16] user data, [15] T flag, [14:0] frame number within the second (from 0) |
| 2 | VLBA BCD time code `JJJSSSSS`: last 3 digits of the MJD, second of the day |
| 3 | [31:16] BCD `.SSSS` fraction of the second, [15:0] CRCC over the 48 BCD bits |

Each data word is one sample time: channel 15 in bits 31:30 down to channel 0
in bits 1:0, each as {magnitude, sign}. At 64 Msps a frame spans 39.0625 µs,
25600 frames per second, 2.048 Gbps of data.

Samples arrive every second clock; a FIFO of 8 words lets the four header
words go out back-to-back while the next frame's first samples arrive. The
output is `m5b_valid/m5b_data` with `m5b_sof` on word 0 and `m5b_eof` on the
last data word; there is no back-pressure. `.SSSS` is
⌊frame·10000/25600⌋ (0.1 ms resolution). The CRCC is CRC-16 with polynomial
x¹⁶+x¹⁵+x²+1, MSB first, initial value 0 (`vlbi_pkg::CRCC_POLY`). The
bit positions of word 1 and the CRC polynomial follow the usual Mark5B
layout; the source gives only the field names and order.

## Time keeping and PPS synchronisation (`time_formatter`)

The host writes the BCD time `JJJSSSSS` of the second that will begin at the
next PPS into the 32-bit TIME register, then sets ARM. At the next rising edge
of the hydrogen-maser PPS (resynchronised by two flip-flops; the start pulse
comes 3 clocks after the edge) the time is loaded, the frame counter cleared,
and the formatter opens frame 0 with the next sample, discarding anything
before. Afterwards time advances from the data: every finished frame advances
the frame number, every 25600 frames the second (BCD, 86399 → 00000 with the
day +1, days modulo 1000). Later PPS edges are ignored unless the unit is
re-armed, which restarts at frame 0.

## Host registers (`sw_regs`)

A synchronous write port and a combinational read port of 32-bit words stand
for the board's processor-to-FPGA bus.

| addr | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | W | bit0 ARM (one pulse per write of 1, reads 0), bit1 T flag |
| 0x01 | TIME | RW | BCD `JJJSSSSS` for the next PPS |
| 0x02 | HDR | RW | [31:28] years since 2000, [27:16] user data |
| 0x03 | STATUS | R | bit0 armed, bit1 synced, bit2 formatter overflow (sticky) |
| 0x10+i | CHSEL i | RW | [4:0] input 0–31 routed to output i; reset value i |
| 0x20+i | THR i | R | current threshold H of output i |

## Parameters

Shared constants are in `rtl/vlbi_pkg.sv`; the top has three parameters.

| name | default | meaning |
|---|---|---|
| `LANES` | 8 | ADC samples per clock |
| `NFFT` | 32 | transform length (16 channels) |
| `TAPS` | 4 | polyphase taps per branch |
| `PB_FACTOR_PERMILLE` | 875 | sinc main-lobe scale |
| `FIR_W`, `BIN_W`, `BB_W` | 12, 18, 18 | FIR, channel and baseband widths |
| `QWIN_LOG2` (top) | 16 | power window of the threshold estimator, 2^N samples |
| `DATA_WORDS` (top) | 2500 | data words per Mark5B frame |
| `FRAMES_PS` (top) | 25600 | frames per second |

`DATA_WORDS` and `FRAMES_PS` only exist to shorten simulations; they must be
changed together to keep the time code right.

## Files

`rtl/`: `vlbi_pkg` (constants, types, window/twiddle/CRC/BCD functions),
`pfb_fir`, `fft_wideband_real`, `pfb_casper`, `usb_converter`, `ddc`,
`channel_select`, `isqrt`, `threshold_estimator`, `two_bit_quantizer`,
`time_formatter`, `mark5b_formatter`, `sw_regs`, `vlbi_backend_top`.

`tb/`: one self-checking testbench per module (`tb_<module>`), plus
`tb_vlbi_backend_full`. Each prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_pfb_fir` | every FIR output against a direct branch sum with an independently computed window; 1-clock latency |
| `tb_fft_wideband_real` | every bin against a floating-point DFT (±4 LSB); latency 5 clocks, 1 frame per 4 clocks |
| `tb_pfb_casper` | a tone at a channel centre lands in that channel only (>30 dB); its complex value in every frame equals the windowed DFT sum computed in floating point; one frame per 4 clocks |
| `tb_usb_converter` | outputs against `Re(z[n] jⁿ)` in floating point; one sample per 2 clocks |
| `tb_ddc` | tones in channels 2, 5, 8, 13 appear at the right upper-sideband frequency (coherence > 0.9) and not in neighbours |
| `tb_channel_select` | random data and maps |
| `tb_threshold_estimator` | H per window against floating-point √, tracking of amplitude steps |
| `tb_two_bit_quantizer` | each code against the rule; 36 % magnitude share for Gaussian input |
| `tb_time_formatter` | arm/PPS behaviour, start 3 clocks after the edge, BCD seconds, day rollover and day 999 → 000 wrap, `.SSSS` at 25600 frames/s |
| `tb_mark5b_formatter` | header words (CRC by long division), data order, sof/eof, pre-start samples dropped |
| `tb_sw_regs` | the register map |
| `tb_vlbi_backend_top` | whole backend at reduced frame sizes: tones through both IFs, X/S-style channel map, header and time across a day boundary, remapping, re-synchronisation, threshold update; counts each mechanism |
| `tb_vlbi_backend_full` | whole backend at default sizes: 2504-word frames every 5000 clocks, thresholds after the first 2¹⁶-sample window, tones in the 2-bit data |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/vlbi_pkg.sv tb/tb_ddc.sv --top tb_ddc -o sim
    ./obj_dir/sim

The full-size run takes well under a minute. Testbenches that need fewer
cycles override `QWIN_LOG2`, `DATA_WORDS` and `FRAMES_PS` on the top.

## How far to trust it, and where it departs from the original

* Verified by simulation only (Verilator, two-state). It has not been placed
  on an FPGA or timed; the direct-DFT transform in particular is larger than
  the FFT a real implementation would use (4 × 256 constant multiplications
  per clock over the four banks).
* Filter-bank internals, window, taps and word widths are this design's own;
  the original takes them from a library. Channel responses therefore differ
  in detail (pass band ±14 MHz of the 32 MHz channel here).
* The DOWN-bank delay is half a frame (2 clocks), not the 4 clocks drawn in the
  source's diagram; see above.
* The frame data section is 10000 bytes, as in the text and the Mark5B
  standard; one figure of the source prints 4992 bytes.
* Header bit positions, CRC polynomial, sign/magnitude polarity and the
  register map are conventional choices, not given by the source.
* Time advances from the frame count after synchronisation; the PPS is used
  only at (re)synchronisation, and no PPS/frame consistency check is made.
* Outside this RTL: the ADC card (its 8-lane sample buses are ports), the
  embedded processor and its control software (the register bus is a port),
  and the 10GbE transmitter (the Mark5B word stream is a port; how frames are
  put into packets is not specified here).
