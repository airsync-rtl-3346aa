# AirSync access-point core

## Design idea

Several access points (APs) that transmit jointly to several clients must keep their carriers
phase-aligned, but each AP has its own oscillator. One AP, the master, transmits a pair of
pilot tones just outside the data band in every OFDM symbol. Every other AP, a secondary, receives
these pilots, measures how the phase of the master's signal moves relative to its own clock, and
rotates its own frequency-domain data by the predicted phase difference before its IFFT. The
secondaries' signals then arrive at the clients as if one radio had sent them all.

This core is the per-AP signal-processing path. It runs in either role. A `cfg_master` input
selects the role.

## Slot structure

A downlink slot is a sequence of 80-sample OFDM symbols:

| slot index | symbol | sent by |
|---|---|---|
| 0 | PN preamble (63-chip m-sequence, x^6+x^5+1) | master |
| 1 | channel-probing header: BPSK on the 16 data bins + pilots | master |
| 2 .. 7 | sync symbols: pilots only (`SYNC_SYMS` = 6) | master |
| 8 .. 7+`cfg_num_data` | data: master sends data + pilots; secondaries send data | all |

A secondary searches for the preamble with a matched filter (`pn_correlator`). The detect pulse
fixes its symbol timer (`airsync_ctrl`). The propagation delay from the master then sits inside
the 16-sample cyclic prefix. From the header it takes one phase reference per data
subcarrier. From every later symbol it takes the pilot phases.

## Phase correction

For data subcarrier *i* and symbol *t* (counted from the header), the secondary applies

    phi_i(t) = phi0_i + s * (t + d)

- `phi0_i` is the header phase of bin *i* with the known BPSK sign removed (`initial_phase_estimator`).
- `s` is the drift per symbol. `phase_smoothing_filter` measures each pilot's phase advance from one
  symbol to the next (modulo one turn) and sums the advances over the four pilots. It keeps the last
  four such sums, a sliding window of four samples. The total is the mean slope with 4 extra
  fraction bits. A new header clears the window.
- `d` = 2 is the look-ahead (`phase_extrapolator`). It equals the pipeline delay. The data of symbol
  *k* is built while symbol *k-1* goes out, from pilots that arrived in symbol *k-2*.

The data value from the host is rotated by `phi_i(t)` (`cordic_rotator`) and placed in its bin.
The pilot bins and unused bins are left empty. The result goes through the IFFT.

## Per-symbol pipeline

Receive side (secondary), one sample per clock:
1. ADC → `pn_correlator` → `airsync_ctrl`. Detect comes 2 cycles after the last chip.
2. `ofdm_rx_framer` drops the CP and gathers 64 samples → `fft` (latency log2 N + 1).
3. A sequencer sends the header bins or the pilot bins through `cordic_vectoring` (atan2). A tag
   routes each angle to the estimator or to the smoothing filter.

Transmit side (both roles):
1. At `sym_pos` = 32 (`BUILD_START`) of the symbol before, 16 values are popped from
   `symbol_buffer`.
2. They are rotated → IFFT → `ofdm_tx_framer`, which inserts the CP, applies a gain of 8 and
   swaps buffers at the symbol boundary.
3. The master fills the pilot bins itself, sends the preamble directly in the time domain, and
   does not rotate.

If the host has not supplied a full symbol, the AP sends silence for that symbol and raises
`buffer_underflow`.

## Numerology and fixed point

- 20 MHz sample clock, one sample per cycle.
- 64-point FFT with a 16-sample CP.
- Data bins 1..8 and 56..63 (about ±2.5 MHz, the 5 MHz data band).
- Pilot bins 23, 24, 40, 41 (about ±7.5 MHz).
- Samples are 16-bit signed I/Q. The 14-bit ADC is shifted up by 2.
- Phases are 16-bit unsigned fractions of a turn, so they wrap for free.
- CORDICs use 14 iterations. Angle error is below 8 LSB, rotation error about 10 LSB.
- The FFT halves at every stage (total 1/N). The transmit framer restores 8x.

## Departures from the paper and own choices

- The paper describes the filter (four-sample sliding window) and linear extrapolation, and it names
  the blocks FFT → Phase Smoothing Filter → Phase Linear Extrapolation → × Data Symbol → IFFT.
- The following are this design's own choices: FFT size, CP length, bin placement, PN sequence,
  header modulation, number of sync symbols, look-ahead `d`, CORDIC use and all word widths.
- RF front-ends, converters, oscillators, the PowerPC/DMA/Ethernet host path and the server-side
  precoding (ZF/THP) are outside this core. The host stream is the `host_valid/host_ready/host_data`
  port.

## Simulation

Each block has a self-checking testbench `tb/<module>_tb.sv` that prints
`TB_RESULT checks=.. failures=..`. With Verilator, compile the package first:

    verilator --binary --timing --assert rtl/airsync_pkg.sv <other rtl files> tb/airsync_ap_tb.sv --top-module airsync_ap_tb

`airsync_ap_tb` runs a master and a secondary. The channel between them has a delay, an attenuation
and a carrier frequency offset. It checks the secondary's transmitted data phases against an
independent model, within 2 degrees. It also checks slot timing, the pilots, and underflow
silence. The FFT testbench uses N=16 to keep build time short.

## Limitations

- Only a constant frequency offset is tracked. There is no outlier rejection on the pilot phases.
- No re-acquisition within a slot.
- The PN threshold must be set by software for the expected signal level.
