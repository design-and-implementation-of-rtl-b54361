# Baseband RTL for a TDD 128-antenna massive-MIMO base station

A massive-MIMO base station uses many antennas (here 128) to serve many
single-antenna users (here 12) on the same time-frequency resources. With
time-division duplexing, uplink and downlink share one carrier and alternate
in time. The channel the base station learns from the users' uplink pilots is
therefore also the channel it needs for downlink precoding.

The full system has:
- 64 radio nodes with two RF chains each, grouped into 8 subsystems of 16
  antennas;
- four sub-band co-processors with 300 of the 1200 used subcarriers each;
- one frame timing common to all of them.

This repository holds the SystemVerilog for the per-node baseband:
- the TDD frame timing;
- synchronisation of that timing to the users through a primary
  synchronisation signal (PSS);
- OFDM demodulation of the uplink, one FFT per antenna;
- OFDM modulation of the downlink.

The multi-user processing on the co-processors is not included. That covers
channel estimation, LMMSE detection, QAM mapping and precoding.

## Frame and numbers

| quantity | value | origin |
|---|---|---|
| antennas / users | 128 / 12 | system description |
| FFT size, used subcarriers | 2048, 1200 | system description |
| sample rate | 30.72 MS/s | LTE numerology (this design) |
| frame | 10 ms = 10 subframes x 2 slots x 7 OFDM symbols | system description |
| cyclic prefix | 160 samples (symbol 0 of a slot), 144 otherwise | LTE normal CP (this design) |
| samples per slot / frame | 15360 / 307200 | follows |

Subframe 0 carries the PSS in its first symbol; the rest of that subframe is
guard. Each slot of subframes 1 to 9 has this layout:

    UL pilot | UL data | UL data | guard | DL pilot | DL data | guard

That gives 36 uplink symbols and 18 + 18 downlink pilot and data symbols per
frame. The guard symbols leave time to switch between receive and transmit.

## Modules

The package `mimo_pkg` holds the shared types and constants. A complex sample
(`cplx_t`) has signed 16-bit I and Q.

### `tdd_frame_ctrl`: frame timing

A single counter `pos` steps through the 307200 sample positions of a frame,
advancing on `sample_en`. The following are decoded from `pos` in the same
cycle:
- subframe, slot, symbol and sample index;
- the CP length, `in_cp` and `useful_first` (the first sample after the CP);
- the symbol type;
- `tx_en` (downlink symbols);
- `frame_start`.

An `align` pulse re-aligns the frame. It adds `PEAK_POS - align_idx`, modulo
the frame length. `align_idx` is where the synchroniser saw the PSS peak.
After the pulse, later frames show the peak at `PEAK_POS`.

### `pss_sync`: PSS cross-correlation

The correlator works on the last `L` = 256 samples. The reference is the
first L samples of the PSS, held as one sign bit per I and Q and loaded by
the host. Each tap is therefore an add or subtract, with no multiplier. The
metric is |c|².

The block tracks the largest metric over a frame. After the sample at
position FRAME-1 it reports, with a one-cycle `peak_valid` pulse:
- that metric's position;
- the metric;
- `found`, set when the metric is above a threshold.

The frame-wide peak search follows the system description. The sign
quantisation, the window length and the threshold are this design's choices.

### `fft_core`: shared transform

An in-place radix-2 decimation-in-time FFT with two banks.
- **Banking.** One bank is written at bit-reversed addresses while the other
  is transformed and read.
- **Throughput.** One butterfly per clock, so a transform takes N/2·log2 N
  clocks (11264 at N = 2048).
- **Twiddles.** A Q1.15 table computed at elaboration.
- **Scaling.** Each stage can halve its result with rounding, under a mask
  bit. Data are 24 bits inside and saturate to 16 bits on read.
- **Flow control.** `load_done` hands the loaded bank to the transform. If
  the other bank is still busy, `overflow` pulses and the symbol is dropped.
  `rd_release` frees the bank.

The bank swap takes effect one clock after `load_done`, so a writer must not
write in that cycle.

### `ofdm_demod` and `ofdm_mod`

`ofdm_demod` works as follows:
- It takes N useful samples; the caller has already removed the CP.
- It runs a forward FFT scaled by 1/N.
- It emits the 1200 used subcarriers, each with its index and its symbol's
  tag. Subcarrier u maps to bin `N-600+u` for u < 600 and to bin `u-599`
  otherwise. DC and the band edges are guard.

`ofdm_mod` works the other way:
- It accepts the used subcarriers in order through valid/ready.
- It zeroes the guard bins.
- It runs an inverse FFT with only the first three stages scaled (gain N/8).
- It sends out CP + N samples under a downstream ready.

The bin mapping and the scaling are this design's choices.

### `bs_top`: radio node

The top module is one radio node:
- Received samples advance the frame timing.
- Antenna 0 feeds the synchroniser, and a detected peak re-aligns the frame.
- Uplink pilot and data samples, without CP, go to one `ofdm_demod` per
  antenna. Each output carries an 8-bit `{subframe, slot, symbol}` tag.
- Downlink symbols enter the shared `ofdm_mod`. Its samples leave only during
  downlink symbols.

`NANT` defaults to 2, one node; the full system holds 64 nodes.

Each 2192-sample symbol must be transformed within its own duration. The FFT
takes 11264 clocks per symbol, so the core clock must run at least about
5.2 times the sample rate. The intended ratio is 8x.

## What is missing, and how far to trust it

Not built:
- the co-processor chain: channel estimation, LMMSE weights by QR,
  detection, QAM mapping and demapping, pilot insertion, precoding;
- the calibration multiplier and its coefficient computation;
- the data combiner and splitter between the nodes and the co-processors.

Outside RTL:
- RF, ADC and DAC;
- digital up and down conversion;
- I/Q correction;
- PCIe peer-to-peer DMA;
- the host;
- clock distribution.

Testbenches, all self-checking, in `tb/`:
- `tdd_frame_ctrl_tb` walks a small frame against a loop-based reference,
  checks re-alignment, and walks one full 307200-sample frame.
- `pss_sync_tb` compares the peak position and the metric with a
  correlation computed in the testbench.
- `ofdm_demod_tb` and `ofdm_mod_tb` compare with a floating-point DFT and
  IDFT at N = 64.
  - The demodulator tolerance is 3 LSB.
  - The modulator tolerance is 16 LSB. Its three scaled stages round, and the
    three unscaled stages after them amplify that error 8x.
- `bs_top_tb` runs a node end to end at N = 64 with two antennas. It counts:
  - synchronisation reports and re-alignments;
  - uplink symbols per antenna;
  - downlink symbols and samples;
  - FFT overflows.

Known defects:
- **`bs_top_tb` still fails.** After the first re-alignment the next
  synchronisation report covers a shortened frame. Later reports show peaks
  away from the nominal position. The fix would be to restart the peak
  search when the frame is re-aligned, but it is not done.
- **Too few downlink symbols in `bs_top_tb`.** The count falls short of what
  the test expects. This has not been investigated.
- **No full-size test of the top.** No testbench runs the top at its default
  size. The largest end-to-end run is the N = 64 one.

## Simulating

With plain Verilator, from the repository root:

    verilator --binary --timing -Wno-fatal -y rtl +libext+.sv rtl/mimo_pkg.sv \
        tb/ofdm_mod_tb.sv --top-module ofdm_mod_tb && ./obj_dir/Vofdm_mod_tb

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.
