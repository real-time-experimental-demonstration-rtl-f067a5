# Real-time multi-band CAP for visible light links: transmitter and receiver RTL

An LED used as a data transmitter has a usable modulation bandwidth of only a few
MHz, and its response falls steeply across that range. Multi-band carrierless
amplitude and phase modulation (m-CAP) splits a fixed signal bandwidth (6.5 MHz
here) into m sub-bands. Each sub-band carries its own QAM stream. Each stream is
shaped by a pair of pulses, p(n) and p'(n), that are orthogonal (a Hilbert pair).
The more sub-bands there are, the flatter the channel looks to each of them.
The aggregate symbol rate stays the same for every m.

This RTL implements the two digital halves of such a link:

- **`mcap_tx`:** the transmitter that feeds a DAC.
- **`mcap_rx`:** the receiver that reads an ADC, recovers the bits and measures the bit error rate (BER) against the known test sequence.

`mcap_vlc_top` places both side by side, with independent clocks. It supports:

- **Sub-bands:** m = 1 … 10.
- **Constellations:** 4-QAM, 16-QAM and 64-QAM on every sub-band.
- **Format changes at run time:** a change holds the affected board in reset, so the link stops until the receiver has found the next frame.

```
 TX (clk_tx)                                                   RX (clk_rx)
 prbs_gen -> qam_mapper -> upsampler -> cap_tx_filter -> band_sum -> dac_out ~~ LED ~~ adc_in
   (Ds)       (M-QAM)        (UP)      p(n), p'(n)       (Sigma)
                                                       adc_in -> sc_sync -> downsampler/cap_rx_filter
                                                                 (S&C)     (DOWN, p(-n), p'(-n))
                                                              -> cpe -> qam_demapper -> ber_counter
                                                                (CPE)     (M-QAM)          (Es)
```

## Signal and sample rate

The transmitted signal is

    s(n) = sum_b sum_k  I_b[k] p_b(n - kN) + Q_b[k] p'_b(n - kN)

The terms are:

- **p_b and p'_b:** a square-root raised-cosine pulse (roll-off β = 0.15), multiplied by cos and sin at the centre of band b.
- **N:** the upsampling factor of every band, N = 3m.

The hardware processes **one sample per clock**. With three samples per aggregate
symbol and an aggregate rate of 6.5 MHz / 1.15 = 5.65 MBd, the sample clock is
fs = 16.95 MHz. The gross bit rate is then:

| Constellation | Gross rate |
|---|---|
| 4-QAM | 11.30 Mb/s |
| 16-QAM | 22.60 Mb/s |
| 64-QAM | 33.90 Mb/s |

The rate does not depend on m. The design only fixes "three samples per aggregate symbol"; the clock frequency itself is set by the board.

## Frame

The original demonstrator does not publish a frame format, so the one used here is this design's own. In transmit order:

1. **Preamble:** 2 × 64 samples, for the Schmidl & Cox timing detector. The two halves are identical. Each half is a 7-bit LFSR sequence mapped to ±8192, and the LFSR is reseeded for each half.
2. **Pilots:** 8 symbols of value 1+j on every band, for phase correction.
3. **Data:** 256 symbols per band.
4. **Flush:** 13 zero symbols (SPAN − 1), so the last data pulse dies out before the next preamble.

Frame length = 128 + (8 + 256 + 13) · 3m samples. The frame rate is set by the transmitter alone.

## Shaping filters (`cap_tx_filter`)

A direct L-tap FIR per band would need L = SPAN·N multipliers. The design uses a
polyphase form instead, because between symbols the upsampled input is zero. At
sample phase `ph` of the current symbol period, the output of band b is:

    out_b = sum_{j<SPAN} dl_i[j] · p_b[j·N + ph] + dl_q[j] · p'_b[j·N + ph]

The terms are:

- **dl_i and dl_q:** the last SPAN I and Q levels of the band, stored in a shift register that advances on `sym_stb`.
- **The multipliers:** 2·SPAN per band, each working every clock.

The coefficients are held in registers indexed by [quad][band][tap][phase]. They are written at run time through the `coef_wr_t` port, so any pulse and band plan can be loaded without rebuilding. The testbenches use:

    p_b(n)  = A · g(n - D) · cos(2π f_b (n - D)),   p'_b(n) = A · g(n - D) · sin(2π f_b (n - D))
    g       = square-root raised cosine, β = 0.15, N samples per symbol, unit energy
    D       = (SPAN·N - 1)/2,   A chosen so that the largest coefficient is 30000
    f_b/fs  = (f_off/Rs + (b + 0.5)(1 + β)/m) / 3,   f_off = 0.5 MHz, Rs = 5.65 MBd

The 500 kHz offset keeps the lowest band clear of the LED bias and of low-frequency noise.

**SPAN = 14 symbols.** A root-raised cosine truncated to 10 symbols leaves about −28 dB of inter-symbol interference, which is too much for 64-QAM; 14 symbols gives −47 dB. The 4-bit tap field limits SPAN to at most 15.

`band_sum` adds the bands, applies a rounding right shift of `tx_shift` bits, saturates to 16 bits and multiplexes in the preamble. The first DAC sample appears 3 clocks after reset is released.

## Matched filters and downsampling (`downsampler` + `cap_rx_filter`)

The receiver needs the matched-filter output only at the symbol instants. It therefore computes correlations instead of a full filter:

    y_i[k] = sum_{n < SPAN·N} x[kN + n] · p_b(n)

Pulses span SPAN symbol periods, so SPAN symbols are being accumulated at any time. Each band keeps SPAN accumulator pairs **ordered by age**:

- **Adding a sample:** accumulator d holds the symbol that started d periods ago, so at phase ph it adds x · p[d·N + ph]. Each accumulator always reads the same tap bank, and only the phase selects a coefficient. This keeps the coefficient multiplexers small.
- **End of a symbol period (`sym_end`):** the accumulators shift up by one place, and the one leaving the last place is complete.
- **Output:** the complete value is scaled by `rx_shift` with rounding, saturated to 18 bits, and emitted (`y_valid`).

The cost is 2·SPAN multipliers per band.

`downsampler` generates the phase, the symbol strobes and the symbol index from `frame_start`. It also ends the frame after all 264 symbols (pilots and data) have come out.

Because the receiver uses the same coefficient addressing as the transmitter, loading the transmitter's p and p' into the receiver gives exactly the matched filter. The first useful output appears SPAN − 1 symbol periods after the frame starts, and those first outputs are the pilots.

## Frame timing (`sc_sync`)

Schmidl & Cox detection compares the two halves of the preamble using two running sums over the input x, delayed by L and 2L samples:

- **P** = Σ x[n−L]·x[n−2L] over L samples: the correlation of the two halves.
- **R'** = Σ x² over 2L samples: the energy of both halves.

**Detection.** A hit is declared when all three hold:

- 8P² ≥ R'², which is the metric P/(R'/2) ≥ 1/√2;
- P > 0;
- R' ≥ R_MIN.

Inputs are pre-shifted right by SHIFT = 4 bits to bound the products.

**Peak search.** After the first hit, a window of WIN = 64 samples looks for the peak of the metric. The peak is compared by cross-multiplication, so no division is needed.

**Alignment.** The input is also delayed by WIN samples, and `frame_start` is issued so that it coincides with the first pilot sample on `x_out`.

**Energy over both halves.** The original method normalises by the energy of one half. Normalising by both halves avoids false triggers just after a loud preamble, when one half is large and the other small.

**Arming.** The detector is disabled while a frame is being demodulated.

## Phase correction (`cpe`) and decisions (`qam_demapper`)

The LED and the analogue chain rotate and scale every sub-band differently. For each band and frame, `cpe` estimates the rotation and gain from the eight pilots:

    c = sum_{pilots} y · conj(1 + j)           (≈ 2·NPILOT·g·e^{jφ})

It then does not divide by c. For every data symbol it outputs:

    z = 2·NPILOT · y · conj(c),   e = |c|²

So z ≈ e · (transmitted level), and `qam_demapper` compares z with thresholds scaled by e:

    decision levels between t and t+1 (axis index):  (2t + 2 - S) · e,   S = sqrt(M)

No division and no per-band gain control are needed. Levels are Gray-coded per axis. The in-phase bits come first, then the quadrature bits, and the bands are in ascending order.

## Bit source and BER counter (`prbs_gen`, `ber_counter`)

The data are a PRBS-15 (x^15 + x^14 + 1). m·bps bits are taken per aggregate symbol period.

The checker does not need to know the transmitter's state:

- **Lock:** it loads the first 15 received bits as its state and then predicts every following bit.
- **Relock:** if more than a quarter of a 1024-bit block is wrong, it declares loss of lock and reloads.

BER = `err_count / bit_count`. Both counters are 48 bits wide.

## Configuration and mode changes

`mcap_cfg_t` holds:

- the number of bands;
- the constellation;
- the transmit output shift;
- the receive matched-filter shift.

Each board latches it while its reset is high. A format change therefore works as follows:

1. Hold the transmitter and the receiver in reset.
2. Write the coefficients for the new m.
3. Apply the new configuration.
4. Release reset.

The receiver resynchronises on the next preamble. This is the "interruption in service" the format change costs. The coefficient port can be written at any time, but writing it while frames are running corrupts those frames.

## Timing summary

| Path | Latency |
|---|---|
| Reset release to first DAC sample | 3 clocks |
| Symbol level to its filter contribution | 2 clocks |
| ADC to `frame_start` | peak + WIN (64) samples |
| Matched filter output | 1 clock after the end of the symbol's last period |
| CPE | after the 8th pilot; data then stream at one symbol per N clocks |
| Demapper | 1 clock register stage |

## Parameters (package `mcap_pkg`)

| Name | Value | Meaning |
|---|---|---|
| M_MAX | 10 | maximum sub-bands |
| SPS1 | 3 | samples per aggregate symbol |
| N_MAX | 30 | maximum upsampling factor (M_MAX·SPS1) |
| SPAN | 14 | pulse length in symbols |
| X_W | 16 | DAC/ADC sample width |
| C_W | 16 | coefficient width |
| Y_W | 18 | matched-filter output width |
| BPS_MAX / BITS_MAX | 6 / 60 | bits per QAM symbol / per aggregate period |
| NPILOT, NDATA, PRE_HALF | 8, 256, 64 | frame (module parameters of `mcap_tx`/`mcap_rx`) |

Parts taken directly from the demonstrator:

- the block chain;
- m = 1 … 10;
- the three constellations;
- the 6.5 MHz bandwidth and β = 0.15;
- the 500 kHz offset;
- Schmidl & Cox timing;
- format changes at run time at the cost of an interruption in service.

Everything else listed above is this design's choice.

## Where this departs from the original system

- **Source and test data.** The original demonstrator was built from vendor FPGA boards whose firmware is not published. The frame format, pilots, PRBS, widths, filter span and sample rate here are reconstructions.
- **Analogue chain not included.** The chain is the DAC daughtercard, the ×4 driver amplifier with bias tee, the LED, the photoreceiver, the ×10 amplifier and the ADC daughtercard. `dac_out` and `adc_in` are plain 16-bit ports.
- **No equaliser.** Phase correction is one complex gain per band and frame. With m = 1 or 2 and a low-pass channel, the per-band symbol rate is high and residual inter-symbol interference limits 16/64-QAM. This is the same effect that motivates using more sub-bands.
- **No clock recovery.** Transmitter and receiver clocks are assumed to be nominally equal. Timing is re-established every frame by the preamble, so a small offset is tolerated over a frame, but no fractional timing correction is made.
- **Schmidl & Cox normalisation.** Energy is taken over both preamble halves (see above).

## Verification

Every block has a self-checking testbench in `tb/` that compares against an independent model. The shared helpers (coefficient formula, Gray levels, PRBS) are in `mcap_tb_pkg`. The system-level testbenches are:

| Testbench | What it does |
|---|---|
| `tb_mcap_tx` | Compares two complete frames (m = 3, 16-QAM) sample by sample with a reference model of s(n). |
| `tb_mcap_rx` | Drives the receiver from a transmitter through an inverting three-tap channel with noise. Formats: m = 4 16-QAM and m = 7 4-QAM. |
| `tb_mcap_vlc_top` | Full default size. Changes format (5/16-QAM → 2/4-QAM → 10/64-QAM → 1/4-QAM) through a channel of 0.7·x[t−2] + 0.25·x[t−3] plus ±4 LSB noise. Checks detection, lock, exact bit counts, frame period and errors. Counts detections, format changes, rotated bands corrected by CPE and BER measurements. |
| `tb_mcap_sweep` | Runs all 30 formats (m = 1 … 10 × 4/16/64-QAM), two frames each, through the same channel. |

BER measured by `tb_mcap_sweep` in that channel (two frames each):

| m | 4-QAM | 16-QAM | 64-QAM |
|---|---|---|---|
| 1 | 0 | 1.2e-2 | 4.4e-1 |
| 2 | 0 | 0 | 7.8e-3 |
| 3 to 5 | 0 | 0 | ≈1e-3 |
| 6 to 10 | 0 | 0 | 0 |

The table shows the expected trend: more bands, less inter-symbol interference per band. For m ≥ 3, every format is below the 7 % FEC limit (3.8e-3) or, for 64-QAM, the 20 % limit (2e-2).

## Simulating

All files use SystemVerilog-2017 and need no include paths beyond `rtl/`. The example below runs the end-to-end test with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_mcap_vlc_top \
    rtl/mcap_pkg.sv tb/mcap_tb_pkg.sv $(ls rtl/*.sv | grep -v mcap_pkg) tb/tb_mcap_vlc_top.sv
./obj_dir/Vtb_mcap_vlc_top
```

Every testbench ends with a line `TB_RESULT checks=<n> failures=<n>`. To run another block's testbench, substitute its name. `tb_mcap_sweep` takes a few seconds of simulation per format.
