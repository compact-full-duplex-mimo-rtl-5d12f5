# A full duplex 2x2 MIMO baseband PHY with digital self-interference cancellation

A full duplex radio sends and receives on the same frequency at the same
time. Its receiver therefore sees its own transmission, the
*self-interference*, many orders of magnitude stronger than the partner's
signal. Antenna isolation and analog cancellation remove most of it. This
RTL is the digital baseband that deals with what remains, for a node with
two transmit and two receive antennas. It talks to a partner node over an
LTE-like OFDM link. The design follows the FPGA PHY of the compact full
duplex MIMO prototype published by Kim et al. ("Compact Full Duplex MIMO
Radios in D2D Underlaid Cellular Networks: From System Design to Prototype
Results"). It is an independent RTL version of that PHY, not the authors'
code.

Three ideas carry the design.

1. **Both nodes send a synchronisation sequence, and each node looks for
   both.** The node correlates its received samples with the partner's PSS
   and with its own PSS. A normalised peak test on each correlation then
   decides which timing estimate to trust.
2. **The node learns its self-interference channels from pilots.** The two
   nodes use disjoint pilot ports of the four-port LTE CRS pattern. That
   lets a node measure, per subcarrier, all eight channels at once: four
   from the partner and four from itself.
3. **Cancellation is done per subcarrier after the FFT.** The node rebuilds
   its own contribution from the symbols it sent and the estimated
   self-interference channels, and subtracts it. A zero-forcing MIMO
   detector then separates the partner's two streams.

## Frame and numerology

| quantity | value |
|---|---|
| bandwidth, sample rate | 20 MHz, 30.72 MS/s |
| FFT size | 2048 |
| cyclic prefix | 512 samples (LTE extended CP) |
| OFDM symbol | 2560 samples |
| symbols per slot | 6 |
| slots per half-frame | 10 |
| half-frame | 153 600 samples (5 ms) |
| used subcarriers | 1200, indexed k = 0..1199 |
| modulation | uncoded QPSK, A(±1 ± j) with A = 2048 |

The FFT bins map to subcarriers as follows:

- Bins 1..600 are k = 600..1199.
- Bins 1448..2047 are k = 0..599.

The PSS sits in symbol 5 of slot 0 of every half-frame, on transmit
antenna 1 only. Antenna 2 sends an empty symbol there. The PSS is a
length-62 Zadoff-Chu sequence on the 62 subcarriers next to DC
(k = 569..630). Node 1 and node 2 use different roots; the frame figure
gives 25 and 29.

The pilots (CRS) follow the LTE four-port layout. Node 1 owns ports 0 and
1, and node 2 owns ports 2 and 3:

| symbol in slot | k mod 6 = 0 | k mod 6 = 3 |
|---|---|---|
| 0 | port 0 | port 1 |
| 1 | port 2 | port 3 |
| 3 | port 1 | port 0 |
| 4 | port 3 | port 2 |

On each port's pilot positions, the other three antennas of the link send
nothing. Every other element of the other symbols carries data.
Per half-frame and antenna that gives 54 800 data elements: 72 000 minus
1 200 PSS-symbol elements minus 16 000 pilot positions.

`fdx_pkg` holds these constants, the shared types, and small functions for
the element type (`crs_is_pilot`, `crs_port`, `is_pss_sc`,
`is_data_re`).

## Timing synchronisation with two PSSs

This is the least conventional part. `lpf`, two `time_sync` instances and
`sync_switch` implement it.

1. **Low-pass filter** (`lpf`). Only the 62 PSS subcarriers (about
   ±465 kHz) are of interest. The Rx 1 samples therefore pass a 65-tap
   linear-phase FIR: a Hamming-windowed sinc with its cut-off at 0.03 of the
   sample rate. The 14-bit coefficients are computed from that formula at
   elaboration. The group delay is 32 samples.
2. **Cross-correlation** (`time_sync`). For each lag d the unit computes
   κ[d] = |Σₙ y_f[d+n] p*[n]|, summing over N = 2048 samples. Here p is the
   time-domain PSS, the 2048-point IDFT of the Zadoff-Chu sequence. The host
   loads p through a small write port; the conjugation happens inside. The
   filter is in transposed form: each of the 2048 taps holds its own
   coefficient and partial sum, so one new lag completes per input sample.
   |·| is an exact integer square root.
3. **Peak and normalised peak.** Over a window of one half-frame (153 600
   lags), the unit keeps the first lag with the largest κ (τ̂) and the sum of
   all κ. At the end of the window it tests the *normalised peak*
   α = κ[τ̂] / mean(κ) against α_th. It does so without a divider:
   κ[τ̂]·NC·16 > ALPHA_TH·Σκ, with ALPHA_TH in Q.4.
4. **Index switching** (`sync_switch`). One correlator looks for the
   partner's PSS (desired signal, result 1). The other looks for the node's
   own PSS (self-interference, result 2). The rule is:

   | α₁ > α_th | α₂ > α_th | desired timing τ₁ | SI timing τ₂ | `sel_case` |
   |---|---|---|---|---|
   | yes | yes | τ̂₁ | τ̂₂ | 1 |
   | yes | no | τ̂₁ | τ̂₁ | 2 (partner close, own PSS masked) |
   | no | yes | τ̂₂ | τ̂₂ | 3 (weak link: use own timing) |
   | no | no | unchanged | unchanged | 0, `fail_valid` |

   The third row rests on a simple observation. When the link is poor, the
   node's own signal is still strong, and the two nodes are close enough in
   time for its timing to serve.

`tau_hat` is the position, in the half-frame sample count, of the first
FFT sample of the PSS symbol as seen after the filter. The
`symbol_segmenter` converts it to a half-frame boundary:
b = τ − (5·2560 + 512 + 32). From the next time the raw sample counter
reaches b, the segmenter does the following:

- It cuts every 2560-sample symbol.
- It drops the 512 CP samples.
- It passes the 2048 remaining samples of both Rx antennas to the FFT cores,
  with bin, slot and symbol numbers.

A changed τ re-arms it at the new boundary. Both antennas are segmented with
the desired-signal timing τ₁. The self-interference needs no separate time
alignment, because it is cancelled per subcarrier with a channel estimate
that absorbs any offset within the CP.

**The threshold value.** No α_th is published. The default is 4.0. One
case needs a higher value: when both PSSs share a symbol and the link is
clean, the other root alone already gives α of about 60, because the
Zadoff-Chu cross-correlation is about 1/√63 of the peak. The end-to-end
test therefore uses 100.0. A deployment should set ALPHA_TH for its own
signal levels.

## Cancellation and detection after the FFT

`fd_mimo_phy` takes the FFT output of both Rx antennas (bin, slot and
symbol with each sample) and runs one resource element per cycle through a
fixed pipeline:

| stage | what happens |
|---|---|
| 0 | `re_indexer` turns bins into subcarrier k; `tx_re_buffer` is read for x_S,1[k] and x_S,2[k]; the rebuild multipliers start |
| 1 | pilots of the partner's ports (desired) and of the own ports (self-interference) are written into the estimators; rebuilt interference ready |
| 2 | `dsic`: r_i = y_i − ĝ_ii x_S,i − ĝ_ij x_S,j, saturated (`rx_res_*` outputs) |
| 3–4 | `zf_demod`: two-cycle zero-forcing detector; data elements only (`det_*`) |

**Channel estimation** (`pilot_extract`, `chan_est`):

- `pilot_extract` picks the pilots of one port pair from the stream. Per Rx
  antenna there are two instances: the partner's ports and the own ports.
- Each pilot gives a least-squares estimate. With the pilot A(1+j), the
  estimate is h = y / (A(1+j)) = ((y_re + y_im) + j(y_im − y_re)) / 2A,
  kept in Q12 on 18 bits.
- Estimates are stored on a grid of every third subcarrier (400 entries).
  Symbols 0 and 3 (or 1 and 4) together fill it.
- On read, the estimate is linearly interpolated between the two nearest
  grid points. The division by 3 is a multiplication by 43691/2¹⁷.
- An estimate is updated whenever its pilot arrives and is held otherwise.
- There are eight estimators per node: four for the desired channel
  H = [h_ij] and four for the self-interference channel G = [g_ij].

**Rebuild** (`si_rebuild`). Each of the four units holds one g_ij
estimator and multiplies ĝ_ij[k] by the symbol x_S,j[k] that this node sent
on antenna j at that subcarrier.

**Tx buffer** (`tx_re_buffer`). It keeps x_S,j[k] for the last 4 OFDM
symbols, so the Tx symbol is still there when the received symbol comes out
of the FFT.

**Detector** (`zf_demod`). The zero-forcing matrix is (HᴴH)⁻¹Hᴴ = H⁻¹ for a
square H. The detector computes adj(H)·r·conj(det H). That is H⁻¹r scaled
by the positive factor |det H|², so QPSK sign decisions are unchanged and no
divider is needed. Bits [1:0] belong to the partner's stream 1 and [3:2] to
stream 2; within each pair the I bit comes first. A higher-order
constellation would need the division by |det H|².

## Transmit side

`tx_mapper` (one per antenna) walks the half-frame grid and produces for
each element one of the following:

- a PSS table value, on antenna 1 in the PSS symbol;
- the pilot A(1+j), on its own CRS port;
- zero, on the other ports' pilot positions and in the rest of the PSS
  symbol;
- QPSK from two input bits.

A data element waits for `bits_valid`, which stalls the stream. The IFFT
side can also stall it with `tx_ready`. The two antennas always advance
together. Each accepted element is also written into the `tx_re_buffer`
of its antenna. IFFT and CP insertion are outside this RTL.

## Link quality meters

Two `power_meter` instances sum |y₁|² + |y₂|² over both ADC streams:

- one over a half-frame (received energy);
- one over 20 half-frames, 3 072 000 samples (noise variance, measured with
  the transmitters off).

Each mean is taken with a constant reciprocal that is exact to one LSB.
The host forms the link quality (E‖y‖² − σ²)/σ².

## What is outside, and the top-level ports

These parts are not in this RTL:

- the FFT and IFFT cores (vendor IP in the prototype);
- the ADC/DAC transceiver, RF front end, dual-polarised antennas and power
  amplifier;
- the real-time host.

`fd_mimo_phy` brings their streams out as ports:

| ports | use |
|---|---|
| `ref_we/ref_sel/ref_addr/ref_re/ref_im` | host loads the two correlation references (0: partner's PSS, 1: own PSS) |
| `pss_we/pss_addr/pss_data` | host loads the own PSS table |
| `bits_valid/bits/bits_ready` | data bits per antenna |
| `tx_valid/tx_ready/tx_pos/tx_re` | frequency-domain elements to the IFFT cores |
| `adc_valid/adc1/adc2` | 14-bit I/Q from the two Rx ADCs |
| `seg_*` | CP-free samples to the Rx FFT cores |
| `fft_valid/fft_bin/fft_slot/fft_sym/fft1/fft2` | Rx FFT output, bins in any order, with slot/symbol passed through |
| `sync_upd/sync_fail/sync_case/tau1/tau2/sync_locked` | synchronisation status |
| `rx_res_valid/rx_res_pos/rx_res1/rx_res2` | subcarriers after cancellation |
| `det_valid/det_pos/det_bits` | detected bits of the partner's two streams |
| `energy_valid/energy_mean/noise_valid/noise_mean` | meters |

Parameters:

| parameter | default | meaning |
|---|---|---|
| `NODE` | 1 | 1 or 2; selects the pilot ports |
| `LPF_NTAP` | 65 | filter taps |
| `SYNC_N` | 2048 | correlation length |
| `ALPHA_TH` | 64 | NSP threshold, Q.4 |
| `TXB_DEPTH` | 4 | Tx buffer depth, in OFDM symbols |
| `NOISE_HF` | 20 | noise window, in half-frames |

Everything runs at one clock with at most one sample per cycle. Resets are
asynchronous and active low. Large memories (estimate grids, Tx buffers,
PSS table) are not reset. Estimates are valid once their pilots have been
seen, after symbol 4 of the first slot.

## Where this RTL departs from the prototype or fills gaps

- **Not published, chosen here:** the filter response, α_th, the pilot
  amplitude, all word widths, the interpolator order (linear), the
  Tx-buffer depth, the pipeline timing and the stream handshakes.
- **Same decisions, different arithmetic:** the ZF detector uses the
  adjugate form. For QPSK it gives the same decisions.
- **Segmentation point:** segmentation starts exactly at the end of the CP.
  The prototype's timing figure shows the start somewhat inside the CP.
- **One timing for both antennas:** only τ₁ drives segmentation. τ₂ is
  reported but not used to shift a second window.
- **Estimator averaging:** channel estimates are not averaged over time.
  Each pilot overwrites its grid point.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares the
module's outputs with a model written independently in the testbench, and
ends with a `TB_RESULT checks=N failures=M` line. Some of the models:

- the Hamming-sinc filter;
- exact correlations and the peak test;
- the CRS table;
- linear channels for the estimator;
- random well-conditioned 2x2 channels for the detector;
- the full grid for the mapper.

`tb_fd_mimo_phy` runs one node end to end. The testbench plays the partner
node, the air and the FFT cores:

- The ADC streams carry both PSS waveforms plus noise. The waveforms come
  from a direct inverse DFT of the Zadoff-Chu sequences.
- Which PSS is present changes from half-frame to half-frame. This drives
  every switching case and the failed test.
- Each segmented symbol is answered with y = H·x_partner + G·x_own + noise,
  where x_own is what the node itself transmitted.

The test checks the timing and the segmented samples, the residual after
cancellation, the detected bits (no errors are allowed) and the meter
values. It also counts each mechanism: the three update cases, a failed
test, Tx stalls from back-pressure and from missing bits, cancellation,
detection and both meter windows. Every one of them must occur at least
once. It uses the full 2048-sample correlators, a raised threshold and a
2-half-frame noise window; it runs six half-frames in about two minutes.

`tb_fd_mimo_phy_full` runs the same scene with every parameter of the top
at its default for 21 half-frames, so that the 20-half-frame noise window
completes.

To simulate with Verilator:

    verilator --binary -j 8 --top-module tb_fd_mimo_phy rtl/fdx_pkg.sv rtl/*.sv tb/tb_fd_mimo_phy.sv
    ./obj_dir/Vtb_fd_mimo_phy

The other testbenches build the same way with their own module list, for
example `rtl/fdx_pkg.sv rtl/zf_demod.sv tb/tb_zf_demod.sv`.

## Limits

- The end-to-end test models the channel in the frequency domain. The data
  part of the signal is therefore never sent through a real FFT.
- Time-domain effects are not covered: carrier frequency offset, timing
  inside the CP and multipath longer than the CP.
- The channel is flat and static.
- The BER and throughput measurements of the prototype depend on the
  analog front end and on the real radio channel. They cannot be
  reproduced in simulation.
