# SARAS correlation spectrometer: FPGA signal processing in SystemVerilog

SARAS is a radiometer built to detect the faint, redshifted 21-cm signal of
neutral hydrogen from Cosmic Dawn and the Epoch of Reionization. That signal is
a spectral feature of tens to hundreds of millikelvin, spread over
40–200 MHz and buried under a sky many thousands of times brighter. The
receiver splits the antenna signal into two analog arms. A digital correlation
spectrometer then measures, over 0–250 MHz:

- the power spectrum of each arm, and
- the complex cross-power spectrum between the two arms.

Phase switching in the analog chain makes the cross spectrum cancel additive
errors from either arm. The spectrometer therefore needs fine channels, an
extremely clean channel response (very low window sidelobes), and a
deterministic, loss-free path from samples to integrated spectra.

This repository holds RTL for the spectrometer's FPGA firmware. The board
samples two signals at 500 MSps with 10-bit ADCs. The logic, clocked at
250 MHz, does the following:

1. It deserializes the ADC data and regroups it into an even-sample and an
   odd-sample stream per input.
2. It weights each 16384-sample block with a minimum 4-term (Nuttall) window.
3. It computes a 16384-point FFT of each block as two 8192-point pipelined
   FFTs plus a final 2-point FFT stage. Each input yields 8192 channels
   30.5 kHz apart, one spectrum every 32.768 µs.
4. It forms |A|², |B|² and A·B* per channel and accumulates them over 2048
   spectra (67.1 ms). This is one *integration*, or *set*.
5. It keeps 16 sets (1.07 s) in a buffer. Afterwards it sends them to the
   acquisition computer as UDP/IPv4/Ethernet frames.
6. It exposes a small register set for a host. Through it the host starts
   acquisition cycles, synchronizes the ADCs and reads and writes ADC
   registers over SPI.

The numbers above (sample rate, clock, window, transform length, split into
2 × 8192, averaging length, set count) come from the published instrument. The
widths after the ADC, the scaling, the memory organisation, the frame format,
the register map and the sequencing are this design's own, because the
published description does not give them. Each file's opening comment states
which parts follow the instrument and which are choices.

## Data flow and timing

```
ADC A (DDR) ─ iserdes_1to4 ─ adc_data_buffer ─┐ even/odd ┌───────────── f_engine A ─────────────┐
                                              └──────────▶ window_weight ─ 2 x fft_r2sdf(8192) ─ │
                                                         twiddle_rotator ─ fft2_parallel ────────┘─┐
ADC B (DDR) ─ ... same ... ───────────────────────────────────────────────── f_engine B ───────────┤
                                                                                                  ▼
                                       x_engine (auto_corr A, auto_corr B, cross_corr) ─ spectra_buffer
                                                                                                  │
host bus ─ ctrl_monitor ─ spi_master ─ ADC SPI        acq_ctrl ─ packetizer ─ byte stream to MAC ◀┘
            └─ adc_sync ─ SYNC pin, datapath reset
```

The design has one clock: the 250 MHz core clock, 4 ns per cycle. Each ADC
delivers one sample on each edge of its strobe, so the top takes two samples
per input per clock (`adc_x_rise`, then `adc_x_fall`). The rest of the chain
moves data with valid strobes:

| point in the chain | rate | notes |
|---|---|---|
| ADC inputs | 2 samples / clock | 10-bit, two's complement |
| `iserdes_1to4` | one 4-sample word every 2nd clock | word-level model of the FPGA's 1:4 input deserializer |
| `adc_data_buffer` | one (even, odd) pair / clock | FIFO of words, 4 → 2 lanes; flags overflow |
| `window_weight` | one pair / clock, latency 2 | block position counted here; sample 0 after datapath reset starts a block |
| each `fft_r2sdf` | one complex sample / clock | latency 8191 + 13 clocks at N = 8192 |
| `f_engine` output | one channel / clock | 8192 clocks = 32.768 µs per spectrum |
| `x_engine` | read-modify-write / clock | one integration = 2048 × 8192 = 16,777,216 clocks = 67.108864 ms |
| `packetizer` | up to 1 byte / clock | valid/ready; never stalls inside a frame |

From the first sample pair of a block to that spectrum's first channel
(`out_sof`), `f_engine` takes NFFT/2 + log2(NFFT/2) + 4 clocks: 8209 clocks at
full size.

## The split 16384-point FFT

The even samples e[n] = x[2n] and the odd samples o[n] = x[2n+1] arrive
together, one pair per clock. The 16384-point transform is therefore built
from two 8192-point transforms that run side by side (decimation in time):

```
E[k] = DFT8192{e}[k]      O[k] = DFT8192{o}[k]      W = exp(-j 2π / 16384)
X[k]        = E[k] + W^k · O[k]
X[k + 8192] = E[k] − W^k · O[k]          k = 0 … 8191
```

- **`fft_r2sdf`** is a radix-2 single-path delay-feedback (SDF) pipeline,
  decimation in frequency. It has log2 N stages (`fft_sdf_stage`). The stage
  of span 2D has a D-word delay line:
  - During the first half of each 2D block, it stores the incoming samples and
    sends out the rotated differences left from the previous block.
  - During the second half, it sends out the sums and stores the rotated
    differences.

  The delay lines are indexed memories. The design never shifts a long
  register. Samples must arrive without gaps, which holds because the ADC
  stream is continuous.
- **Order.** A DIF pipeline produces its bins in **bit-reversed order**. The
  p-th output of a spectrum is bin k = bitrev13(p). Neither the FFT nor the
  2-point stage reorders anything. Every block downstream carries the true
  channel number alongside the data (`out_ch`, `in_ch`). `twiddle_rotator`
  uses it to pick W^k. The X-engine uses it to address its accumulators. The
  accumulated spectra are therefore stored, and sent out, in natural channel
  order, even though channels pass through the pipeline in bit-reversed order.
- **`twiddle_rotator`** multiplies O[k] by W^k. Twiddles are 16-bit signed
  cos/−sin values scaled by 2¹⁵−1, computed at elaboration. The published
  block diagram draws a multiplier in both paths. In this design the even
  path's "multiplier" is a delay of equal length (a multiply by 1).
- **`fft2_parallel`** forms the 2-point FFT in one clock. Only the lower half,
  X[k] for k < 8192, is passed on. For a real input, X[k+8192] = conj(X[8192−k]),
  so the upper half holds nothing new. The upper half is still an output
  (`out_hi`) of `f_engine`, but the top leaves it unconnected.

### Fixed-point scaling

All FFT data are 18-bit signed (`FFT_W`). The scaling is chosen so that
nothing can overflow:

| step | operation | result |
|---|---|---|
| window | s[n] = (x[n] · w[n]) >>> 10, with x 10-bit signed and w 18-bit unsigned (w = round((2¹⁸−1)·window)) | s ≈ x·window·2⁸, fits 18 bits |
| each radix-2 stage (13 per 8192-point FFT) | (a ± b)/2 rounded half to even; differences multiplied by a twiddle, rounded half up | output of one core = DFT/8192 |
| 2-point FFT | (E ± W^k O)/2 | output = X[k] / 16384 |
| products | 18 × 18 → 36-bit power or cross term, sign-extended | |
| accumulation | 48-bit signed, 2048 terms | |

A channel value is therefore X[k]/16384, where X is the DFT of the windowed,
2⁸-scaled samples. For example, a full-scale tone (amplitude 511) that falls
on a channel centre gives a value of about 511 · 2⁸ · 0.3636 / 2 ≈ 23,800
(0.3636 is the window's coherent gain). Its power is below 2³⁰.

The 48-bit accumulator cannot overflow. Any 18-bit complex value has a power
below 2³⁵, and 2048 · 2³⁵ = 2⁴⁶, which is less than 2⁴⁷. Rounding in the
stages adds noise of a few LSB per output. The testbenches allow 24 LSB of
amplitude error per bin against a floating-point DFT at full size.

Rounding matters here. The halving rounds half to even (`half()` in
`saras_pkg`). Plain truncation loses 1/4 LSB on average at every halving and
1/2 LSB at every product. That bias concentrates near DC and raised the floor
there to about −72 dB of a near full-scale tone. With unbiased rounding:

| measure | level |
|---|---|
| mean error floor | −87 dB |
| highest channel away from the tone and DC | −81 dB |
| the instrument's measured sidelobe suppression | 80 dB |

`tb_f_engine_sidelobe` measures this at full size. The window multiply still
truncates. That leaves a DC offset of half an LSB, which only affects the few
channels next to DC, below the band of interest. For more dynamic range in
weak channels, widen `FFT_W`, which feeds the whole chain from `saras_pkg`.

### Window

`window_coeff_rom` holds the periodic minimum 4-term Blackman–Harris window:

```
w[i] = a0 − a1·cos(2πi/N) + a2·cos(4πi/N) − a3·cos(6πi/N)
a0 = 0.3635819, a1 = 0.4891775, a2 = 0.1365995, a3 = 0.0106411, N = 16384
```

The coefficients are 18-bit unsigned and scaled by 2¹⁸−1. The design computes
them at elaboration with `$cos`, so no data file is involved. The ROM has two
read ports (w[2n] and w[2n+1]) and a registered output. This window has
sidelobes near −98 dB. It also halves the effective integration time and
widens the noise bandwidth of each channel to about twice the channel spacing.
This is why the resolution is about 61 kHz, although the channel spacing is
30.5 kHz.

## Correlation and integration (X-engine)

The two F-engines share one datapath reset and are fed at the same time, so
they deliver the same channel of A and B on the same clock. The top asserts
that they stay in step. `x_engine` feeds each channel to three correlators:

- `auto_corr` computes |A|² and |B|².
- `cross_corr` computes A·conj(B). The real and imaginary parts are
  accumulated separately.

Each correlator keeps a per-channel memory of 8192 × 48-bit words and does a
read-modify-write for every incoming channel. Because the memory is addressed
by channel number, the bit-reversed arrival order does not matter.

On the first spectrum of an integration, the correlator writes the product
instead of adding it. On the last spectrum, it also sends the finished sum
out. No clearing pass is needed, and integrations follow each other with no
dead time.

`x_engine` sequences the integrations:

1. On `start`, it waits for the next spectrum boundary.
2. It then runs `num_int` integrations back to back, numbered 0, 1, 2, ….
3. `int_done` pulses with the last channel of each integration.

`spectra_buffer` stores one record per channel per set in a single memory:
16 × 8192 records of 4 × 48 bits (`corr_t`), 25.2 Mbit in total. Its read
port returns one 48-bit word, chosen by set, channel and product (0 auto A,
1 auto B, 2 cross real, 3 cross imaginary).

## Acquisition cycle and read-out

An acquisition cycle (`acq_ctrl`) runs as follows:

1. The host writes the start bit.
2. The X-engine integrates `NSETS` sets into the buffer (16 by default, 1.07 s).
3. The packetizer sends all of them.
4. The controller returns to idle and counts the cycle.

Acquisition and read-out do not overlap. Between cycles the host switches the
receiver to its next state: antenna or reference, noise source on or off,
switch position. The 8-bit *state tag* it writes is copied into every frame
of the next cycle, so the spectra can be matched to receiver states.

The number of sets per cycle is programmable through register 5. The reset
value is 16. Values of 0 or above 16 mean 16. This is an addition of this
design. It lets a test, or an observer who needs faster state switching, run
shorter cycles. The X-engine and the packetizer both use the value captured
at start.

### Frame format

Each frame carries 128 values (`P_CH_PER_PKT`) of one product of one set. The
frames leave in this order: blocks of 128 channels, then product, then set.
A full cycle is 16 × 4 × 64 = 4096 frames of 818 bytes each. The stream to the
MAC excludes preamble and FCS, which the MAC adds.

| bytes | field |
|---|---|
| 0–5, 6–11 | destination MAC, source MAC (constants in `packetizer`) |
| 12–13 | EtherType 0x0800 |
| 14–33 | IPv4 header: no options, TTL 64, UDP, constant addresses; checksum computed at elaboration (the header is constant) |
| 34–41 | UDP header: ports, length, checksum 0 (allowed over IPv4) |
| 42–43 | marker 0x5A5A |
| 44 | receiver state tag |
| 45 | set[3:0] , 2'b00 , product[1:0] |
| 46–47 | first channel of the frame |
| 48–49 | acquisition cycle count (wraps after 65536 cycles, about 19.5 h) |
| 50… | 128 values, 6 bytes each, big-endian, two's complement |

The packetizer reads ahead one value, so the buffer's one-clock read latency
is hidden. `tx_valid` stays high from the first to the last byte of a frame;
`tx_ready` may drop at any time. Sending one byte per clock, a full cycle's
3.35 MB takes about 13.4 ms. The average rate over a 1.07 s cycle is about
3.1 MB/s. The published instrument quotes about 16 MB/s, which cannot be
derived from the numbers it gives (its value widths are not published). This
design's rate differs from that figure.

## Control, ADC configuration and synchronization

`ctrl_monitor` is the register set for the host. The published instrument
reaches it through a serial-to-Ethernet module. Here it is a plain bus:
4-bit address, 32-bit data, write strobe, and combinational read data.

| addr | name | access | contents |
|---|---|---|---|
| 0 | CTRL | write | bit 0: start an acquisition cycle; bit 1: ADC SYNC (both are pulses) |
| 1 | STATUS | read | bit 0 acquisition busy, bit 1 ADCs synchronized, bit 2 SPI busy, bit 3 capture overflow seen; [31:16] completed cycles |
| 2 | TAG | r/w | [7:0] receiver state tag |
| 3 | SPI_CMD | r/w | [23:0] SPI frame {rw, addr[6:0], data[15:0]}, [24] ADC select; a write starts the transfer |
| 4 | SPI_RD | read | [15:0] data returned by the last SPI transfer |
| 5 | NSETS | r/w | integrations per cycle (reset value 16) |

`spi_master` sends each 24-bit frame MSB first in SPI mode 0. It drives one
chip select per ADC and runs the serial clock at clk/(2·`P_SPI_DIV`). For a
read (rw = 1), it captures the last 16 bits from MISO. The frame layout is an
assumption. Before connecting a real ADC, check it against the ADC's
datasheet.

`adc_sync` runs once after reset and again on each SYNC request:

1. It drives the shared SYNC pin high for `P_SYNC_W` clocks.
2. It holds the whole capture and F-engine datapath in reset for `P_SETTLE`
   more clocks while the ADC outputs restart.
3. It releases both inputs on the same clock.

Both F-engines therefore start their 16384-sample blocks on the same sample
pair, which the cross spectrum needs. The X-engine, buffer and packetizer stay
out of this reset.

## Files

| file | contents |
|---|---|
| `rtl/saras_pkg.sv` | widths and sizes, `cplx_t`, `corr_t`, product codes, helpers (bit reversal, rounding, saturation) |
| `rtl/iserdes_1to4.sv`, `rtl/adc_data_buffer.sv` | capture path |
| `rtl/window_coeff_rom.sv`, `rtl/window_weight.sv` | window |
| `rtl/fft_sdf_stage.sv`, `rtl/fft_r2sdf.sv` | 8192-point pipelined FFT |
| `rtl/twiddle_rotator.sv`, `rtl/fft2_parallel.sv`, `rtl/f_engine.sv` | split 16384-point F-engine |
| `rtl/auto_corr.sv`, `rtl/cross_corr.sv`, `rtl/x_engine.sv` | X-engine |
| `rtl/spectra_buffer.sv`, `rtl/packetizer.sv`, `rtl/acq_ctrl.sv` | buffering and read-out |
| `rtl/ctrl_monitor.sv`, `rtl/spi_master.sv`, `rtl/adc_sync.sv` | control |
| `rtl/saras_top.sv` | the top, with parameters `P_NFFT`, `P_NACC`, `P_NSETS`, `P_CH_PER_PKT`, `P_SYNC_W`, `P_SETTLE`, `P_SPI_DIV` |
| `tb/tb_<module>.sv` | one self-checking testbench per block |
| `tb/tb_f_engine_sidelobe.sv` | spectral purity of the full-size F-engine |
| `tb/adc_spi_model.sv` | behavioural register model of the ADC SPI port |
| `tb/tb_saras_top.sv` | end-to-end test at reduced size |
| `tb/tb_saras_top_full.sv` | end-to-end test at full size |

## Simulating

Every testbench checks its results. It prints
`TB_RESULT checks=<n> failures=<m>` and calls `$finish`, and it has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/saras_pkg.sv tb/tb_saras_top.sv --top-module tb_saras_top -o sim
./obj_dir/sim
```

Substitute any other `tb_*` name to run another test. The control state is
reset and every memory is written before it is read, so the tests also pass
with `+verilator+rand+reset+2` (random initial values).

What the tests compare against:

- **Blocks.** Each block test computes its reference independently:
  - a floating-point DFT for `fft_r2sdf` (64 points) and `f_engine`
    (64-point split);
  - the window formula over all 16384 coefficients;
  - sums computed in the testbench for the correlators and the X-engine;
  - a parsed frame, with its checksum recomputed, for the packetizer;
  - a register model for the SPI path.
- **`tb_saras_top`** runs the whole chain at NFFT = 64, 4 spectra per
  integration, 2 sets and 8 channels per frame. It feeds periodic inputs (a
  tone plus fixed noise), so every integration equals NACC times the spectra
  of one windowed block. It checks every value of every frame against a
  floating-point reference. It runs a SYNC request, an SPI write and read,
  three acquisition cycles with different state tags (the third shortened to
  one set), and random MAC back-pressure. It counts each of these and fails
  if any did not occur.
- **`tb_f_engine_sidelobe`** drives a full-size F-engine with a near
  full-scale tone between two channels, plus dither. It averages 32 spectra.
  It requires every channel more than 8 channels from the tone and from DC to
  stay 80 dB below the tone's peak.
- **`tb_saras_top_full`** uses the top with its default parameters:
  16384-point transforms, 2048 spectra per integration and 128 channels per
  frame. It runs one acquisition cycle shortened to 3 sets through the NSETS
  register, which takes about 51 million clocks, roughly 1.5 minutes in
  Verilator. It checks:
  - the 67.108864 ms integration period;
  - every frame header;
  - a selection of channels in every set against a floating-point DFT: the
    tone channels, their neighbours and a spread of others.

  A full 16-set cycle is 268 million clocks. It has not been simulated. The
  16-set sequencing is covered by the reduced-size and block tests.

## Departures from the published instrument, and limits

- **FFT cores.** The instrument uses vendor-generated 8192-point FFT cores.
  Here they are an independent R2SDF design with the same function. Its
  scaling (÷2 per stage) and its rounding are this design's.
- **Capture primitives.** The deserializers are word-level logic, not the
  FPGA's ISERDES primitives. The DDR inputs are modelled as two samples per
  core clock. There is no clock-domain crossing, because the ADC strobe
  domain and the core clock are taken to be the same clock.
- **Twiddle multiplier in the even path.** The published diagram shows one;
  here it is a delay.
- **Buffer size.** 16 sets × 8192 channels × 4 × 48 bits is 25.2 Mbit. That
  exceeds the 416 × 36 kb block RAM of the XC6VLX240T. The instrument says
  only that the sets are buffered "on the board", and does not give its word
  width. A real implementation needs narrower words or external memory. The
  RTL keeps a plain memory array.
- **Data rate.** The frame format and values give about 3.1 MB/s averaged over
  a cycle, not the published 16 MB/s (see above).
- **Set count.** The programmable set count (register 5) is an addition. The
  instrument always uses 16.
- **Not built.** The following are outside this RTL:
  - the ADCs themselves;
  - the clock generation (MMCM) and the sampling synthesizer;
  - the Ethernet MAC and SFP. The top ends at the MAC client byte stream.
  - the other board interfaces;
  - the host computer and the switching electronics.

  The top's ports are where these connect.
- **Untested assumptions.** The SPI frame layout, the SYNC pulse width and the
  settle time are assumptions. Check them against the ADC datasheet before
  connecting hardware.
