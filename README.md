# A low-complexity, bandwidth-reconfigurable filter for filtered-OFDM LDACS

LDACS, the L-band Digital Aeronautical Communication System, is meant to fit
an OFDM signal into the roughly 1 MHz gaps between legacy DME channels. Plain
OFDM leaks too much energy outside its band, so standard LDACS uses only
about 498 kHz of each gap. Filtering the OFDM signal (filtered OFDM) removes
most of that leakage and allows wider signals, up to 732 kHz. But a single
linear-phase FIR sharp enough to meet the LDACS spectral mask needs about 100
multipliers.

This RTL implements a cheaper filter of the same kind. It is a cascade of three
short FIR sub-filters:

| Stage      | Prototype order | Interpolation M | Kind                 | Multipliers per lane | Group delay (samples) |
|------------|-----------------|-----------------|----------------------|----------------------|-----------------------|
| Filter I   | 26              | 4               | lowpass, per bandwidth | 14                 | 13 x 4 = 52           |
| Filter II  | 26              | 2               | halfband, fixed      | 7 (+ one shift)      | 13 x 2 = 26           |
| Filter III | 14              | 1               | halfband, fixed      | 4 (+ one shift)      | 7                     |
| Cascade    |                 |                 |                      | **25**               | **85** (21.25 us at 4 MHz) |

The overall response is H(z) = H_I(z) · H_II(z) · H_III(z).

## How the cascade works

**Interpolation.** Filter I is designed at four times the wanted band edges. Every
unit delay is then replaced by four delays. This shrinks its passband and
transition band by 4 at the 4 MHz sample rate, but it also creates image
passbands at multiples of half the Nyquist frequency. A sharp
filter is thus obtained from only 14 unique coefficients (order 26,
symmetric).

**Masking.** Filter II is a halfband filter interpolated by 2. It removes
the image around half the Nyquist frequency. Filter III, a plain halfband
filter, removes the image that remains near the Nyquist frequency.

The spectral mask is tightest far from the carrier. So each stage is built to a
relaxed attenuation target, and the cascade as a whole meets the mask: Filter
I covers the region next to the passband, and Filter III covers the far region.

**Halfband savings.** In a halfband filter every second coefficient is zero,
and the centre coefficient is exactly 0.5. The centre tap is therefore a
shift, not a multiplier, and only (N+2)/4 coefficients need storing and
multiplying: 7 for N=26 and 4 for N=14.

**Reconfiguration.** Only Filter I depends on the transmission bandwidth. The
masking filters are designed once, for the widest bandwidth, and are shared
by all four. The coefficient store therefore holds 4 × 14 + 7 + 4 = 67 words
instead of 144. The design supports four bandwidths, 342, 498, 654 and
732 kHz, at 4 MHz sampling. Their normalised band edges (Nyquist = 1) are:

| Bandwidth | Filter I passband | Filter I stopband |
|-----------|-------------------|-------------------|
| 342 kHz   | 0.3418            | 0.6724            |
| 498 kHz   | 0.498             | 0.6724            |
| 654 kHz   | 0.6543            | 0.795             |
| 732 kHz   | 0.7324            | 0.795             |

The two masking filters have these edges:

| Filter     | Passband | Stopband |
|------------|----------|----------|
| Filter II  | 0.3975   | 0.6025   |
| Filter III | 0.1988   | 0.8013   |

The reference frequency is Fm = 0.795, the Filter I stopband edge of the
widest bandwidth. From it, Fp2 = Fm/2, Fs2 = 1 − Fp2, Fp3 = Fm/4 and
Fs3 = 1 − Fp3.

## Where the filter sits

In the transceiver there is one instance on each path:

- **Transmit:** the filter follows preamble addition. Its output goes to
  the RF transmitter.
- **Receive:** the filter takes the output of the RF receiver, after
  pilot-based phase correction. Its output goes to preamble detection.

`lref_ofdm_top` holds both instances, and one bandwidth select drives both.
The OFDM baseband is not part of this RTL. That covers scrambling,
convolutional coding, interleaving, QPSK mapping, frame generation,
128-point IFFT/FFT with a 22-sample cyclic prefix, equalisation and
decoding. The RF front end and the channel are not part of it either. Their
sample streams are the top's ports.

## Transposed direct form with symmetry

Each stage computes y[n] = Σ_t h_t · x[n − M·t] in *transposed* direct form.
The stage keeps a line of M·N partial sums. At every accepted sample:

- each unique coefficient multiplies the new sample once;
- each product is added into the partial-sum line at its two mirrored
  positions, M·k and M·(N − k);
- positions between taps are plain registers that pass the sum along;
- the output is the product for tap 0 plus the partial sum at position 1.

Because each product is shared by the mirrored pair, a symmetric order-N filter
needs only N/2 + 1 multipliers. Interpolation costs registers only.

One consequence matters for reconfiguration. The partial sums already in the
line were formed with the old coefficients. After a bandwidth switch, the
output therefore changes over one filter length: sample k is weighted with the
coefficients that were active when sample k entered. There is no glitch from a
half-loaded coefficient set. The testbench model reproduces this exactly.

## Bandwidth switching

`lref_coef_ctrl` compares `bw_sel` with the bandwidth in effect (`active_bw`).
When they differ, it reads the 14 Filter I words of the new bank from the
store, one word per clock, into shadow registers. It then commits all 14 in a
single clock, and `switch_done` pulses in that clock. From the clock edge
at which the change is seen to the commit takes 14 + 3 clock edges.

After reset, and after a `reload` pulse, the controller loads all 25 words,
which takes 25 + 3 edges. `ready` rises at the first commit. Until then the
coefficients are zero and so is the output. The filters keep accepting
samples during a load. A request that arrives during a load is served when
that load finishes.

Coefficient store map (16-bit two's complement, Q1.15):

| Address   | Contents |
|-----------|----------|
| 14·b + k  | Filter I bank b (0 = 342, 1 = 498, 2 = 654, 3 = 732 kHz), h_k for k = 0..13 (h_13 is the centre tap) |
| 56 + j    | Filter II tap h_{2j}, j = 0..6 |
| 63 + j    | Filter III tap h_{2j}, j = 0..3 |

## Interfaces and timing

All blocks are synchronous to `clk`, with an active-low synchronous `rst_n`.

- **Samples.** A stream carries one complex sample per `*_valid` strobe: `LANES` (2, for I and Q)
  signed `WL`-bit words that share the coefficients. The intended sample rate
  is 4 MHz, and any faster clock works with gaps between strobes. The delay
  lines advance only on a strobe, so group delays are in samples, not clocks.
- **Latency.** Each stage registers its output, so `out_valid` follows `in_valid` by
  3 clocks for a whole filter. The impulse peak appears at output sample 85,
  or 170 through the transmit and receive filters in series.
- **Arithmetic.** Products and partial sums are kept at full precision, WL + CW + 4
  guard bits. After each stage the sum is rounded half-up to WL bits with
  the coefficient scaling (2^15) removed, then saturated.
- **Configuration.** `cfg_we`/`cfg_waddr`/`cfg_wdata` write the coefficient
  store of both filters. Pulse `reload` afterwards to load the new words.
  `lref_coef_mem` reads its power-up contents from `rtl/lref_coeffs.hex`. The
  path is relative to the directory the simulator or synthesis tool runs in.
  The file always holds 16-bit Q1.15 words. With `CW` < 16 the store rounds
  each word half-up to Q1.(CW−1) as it loads it; with `CW` > 16 it pads it
  with zero bits.

## Coefficients

The coefficients in `rtl/lref_coeffs.hex` belong to this implementation.
Published descriptions of this filter architecture do not list coefficient
values. They were obtained as follows:

- **Filter I:** Parks–McClellan (equiripple) designs of order 26 for the
  band edges in the tables above. The passband/stopband weights are
  10, 3, 1 and 0.3 for the four bandwidths, trading stopband depth for
  passband ripple as the transition narrows.
- **Filters II and III:** equiripple designs with equal weights. The
  coefficients that are zero in a halfband filter were then forced to zero,
  and the centre tap to 0.5.
- **Quantization:** everything is rounded to Q1.15.

Each sub-filter, taken alone as its prototype, reaches at least the
attenuation that the published specification asks of it:

| Sub-filter         | Stopband from | Attenuation required | Attenuation of these coefficients |
|--------------------|---------------|----------------------|-----------------------------------|
| Filter I, 342 kHz  | 0.6724        | −70.5 dB             | −76.0 dB                          |
| Filter I, 498 kHz  | 0.6724        | −37.9 dB             | −49.8 dB                          |
| Filter I, 654 kHz  | 0.795         | −31.5 dB             | −39.1 dB                          |
| Filter I, 732 kHz  | 0.795         | −14.5 dB             | −15.9 dB                          |
| Filter II          | 0.6025        | −43.1 dB             | −52.1 dB                          |
| Filter III         | 0.8013        | −81.8 dB             | −83.9 dB                          |

The resulting cascades have this stopband attenuation beyond each Filter I
stopband edge (in Hz: 336 kHz for 342/498 kHz, 397.5 kHz for 654/732 kHz),
and this passband ripple:

| Bandwidth | Stopband attenuation | Passband ripple |
|-----------|----------------------|-----------------|
| 342 kHz   | −54.7 dB             | ±0.02 dB        |
| 498 kHz   | −49.1 dB             | ±0.1 dB         |
| 654 kHz   | −39.1 dB             | ±0.12 dB        |
| 732 kHz   | −16.0 dB             | ±0.44 dB        |

`tb_lref_spectrum` measures the same figures on the RTL with complex tones.
The 732 kHz set is weak right at its stopband edge: an order-26 prototype
cannot make that narrow transition. Above 585 kHz it is below −50 dB.
The figures have not been checked against the LDACS spectral masks point by point.
Any other set can be written into the store at run time. Nothing in the RTL
depends on the values, except that the masking filters must be halfband.

## Files

| File | Contents |
|------|----------|
| `rtl/lref_pkg.sv` | orders, interpolation factors, store map, group delay, bandwidth enum |
| `rtl/ifir_sym_stage.sv` | Filter I: interpolated symmetric FIR, transposed form |
| `rtl/ifir_halfband_stage.sv` | Filters II and III: interpolated halfband FIR (parameters ORDER, M) |
| `rtl/lref_coef_mem.sv` | 67-word coefficient store |
| `rtl/lref_coeffs.hex` | default store contents |
| `rtl/lref_coef_ctrl.sv` | bandwidth controller / coefficient loader |
| `rtl/lref_filter.sv` | complete filter: store, controller, three stages |
| `rtl/lref_ofdm_top.sv` | transmit and receive filters of the transceiver |
| `tb/lref_model_pkg.sv` | bit-true direct-form model of the cascade |
| `tb/tb_*.sv` | self-checking testbenches, one per block |

## Simulating

Run from the directory that contains `rtl/` and `tb/`. For example, the
end-to-end test, which uses the default parameters:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/lref_pkg.sv tb/lref_model_pkg.sv rtl/lref_coef_mem.sv rtl/lref_coef_ctrl.sv \
  rtl/ifir_sym_stage.sv rtl/ifir_halfband_stage.sv rtl/lref_filter.sv rtl/lref_ofdm_top.sv \
  tb/tb_lref_ofdm_top.sv --top-module tb_lref_ofdm_top -o sim
./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`, and each
has a watchdog. What they cover:

| Testbench | Checks |
|-----------|--------|
| `tb_ifir_sym_stage`, `tb_ifir_halfband_stage`, `tb_filter3_stage` | one stage each (Filters I, II, III), against a direct-form model; random gaps, coefficient changes mid-stream, saturation; impulse at the group delay; zeros between interpolated taps; one-clock latency |
| `tb_lref_coef_mem` | power-up contents, read latency, writes, out-of-range addresses |
| `tb_lref_coef_ctrl` | full and partial loads, their clock counts, the atomic commit, reload, requests during a load |
| `tb_lref_filter` | for each bandwidth, the full 171-sample impulse response, its symmetry and its peak at sample 85; then random streaming with live bandwidth switches |
| `tb_lref_ofdm_top` | transmit filter looped into receive filter; every output of both compared with the model; counts bandwidth selections, live switches, a coefficient rewrite and reload, and stream gaps, and fails if any never happened |
| `tb_lref_wordlength` | an 8-bit filter (`WL`=8, `CW`=8) and a 32-bit filter (`WL`=32, `CW`=16) fed the same signal through all four bandwidths, each bit-exact against the model; the 8-bit output error, about −27 dB relative to the 32-bit output, must lie between −40 and −15 dB |
| `tb_lref_spectrum` | for each bandwidth, the gain at 5 passband and 16 stopband frequencies, measured with complex tones and compared with the response computed from the coefficient file; the passband must be within ±0.5 dB, and the worst stopband must beat −54, −48, −38 and −15 dB |

The block testbenches take a few seconds each. The end-to-end test takes
about 20 s, mostly to compile.

## Departures and open points

- **I/Q lanes.** The filter is described for one signal. Running I and Q through
  shared coefficients is an assumption; it doubles the multipliers to 50 per
  filter.
- **Rounding and saturation.** Rounding after every stage, saturation, the guard bits, the valid
  handshake and the store's write port are implementation choices.
- **Centre-tap delay of Filter I.** One published form of the Filter I response writes the centre term as
  h13·z^(−2n). Here it is taken as h13·z^(−52), the centre of the interpolated
  line, which is what the general formula and the 85-sample group delay imply.
- **Word lengths.** The defaults build the 16-bit filter. The 8- and 32-bit filters of
  the word-length comparison need `WL` (and `CW`) overridden. They are
  simulated only by `tb_lref_wordlength`, as filters alone, not inside a
  transceiver. Whether an "8-bit filter" also means 8-bit coefficients is
  not settled; the test takes it to mean both.
- **Bandwidth encoding.** Which code selects which bandwidth, and the store address map, are choices of this
  design.
