# OFDM range profiling on an RFSoC: programmable-logic RTL

A 5G NR downlink waveform is already a good radar signal. Each OFDM symbol
carries known data on thousands of subcarriers over 400 MHz of bandwidth. A
receiver that knows what was sent can therefore divide it out, subcarrier by
subcarrier. What is left is the frequency response of the propagation channel.
An inverse FFT of that response gives the channel's impulse response: a
**range profile**, with one peak for every reflector at the reflector's
round-trip delay.

This RTL is the programmable-logic (PL) part of such a sensing transceiver.
It targets an AMD RFSoC with external 28 GHz beamformers. The PL does the
following:

* plays one CP-OFDM symbol of a 5G NR PDSCH waveform from a block RAM to the
  I/Q DACs, over and over;
* for each receive beam, cuts the matching symbol out of the ADC stream and
  computes the range profile (FFT, channel estimation, IFFT);
* stores each profile in a block RAM that the on-chip processor reads over
  AXI4-Lite;
* steps the receive beamformer to its next direction with a GPIO pulse, one
  rising edge per beam.

Host software stacks the profiles of all transmit and receive beams into a
range × Tx-angle × Rx-angle tensor. Detection and tracking run on that tensor
(MTI filtering, CA-CFAR, DBSCAN, an extended Kalman filter and Hungarian
association). That software is not part of this RTL.

The system follows the published RFSoC 4x2 / Sivers EVK02001 testbed by
X. Li et al., "Real-Time Multi-Target Detection and Tracking with mmWave 5G
NR Waveforms on RFSoC". That publication names the PL processing steps and
their order, but not how they are built inside. Everything below the block
level is this design's own, and is marked as such.

## Numerology

| quantity | value | origin |
|---|---|---|
| carrier | 275 resource blocks, 120 kHz SCS, 400 MHz | publication |
| active subcarriers | 3300 (275 × 12) | follows from the above |
| FFT size `N_FFT` | 4096 | 3GPP numerology μ = 3 |
| cyclic prefix `CP_LEN` | 288 samples | 3GPP normal CP at N = 4096 |
| sample rate (used for timing figures) | 491.52 MS/s | 4096 × 120 kHz |
| receive beams per sweep (reset value) | 21 | own choice; 21 × 21 = 441 beam pairs, "more than 400" in the publication |

All of these are in `rtl/isac_pkg.sv` or are parameters or registers. They are
not hard-coded in the datapath.

## Block diagram

```
             +-------------------- axil_regs (AXI4-Lite, PS side) ------------------+
             | waveform writes       reference writes   sweep ctrl     profile reads |
             v                            |                 |                ^       |
   tx_waveform_player --dac_i/q-->  RF DACs                 |                |
         | sym_start                      |                 v                |
         v                                v          beam_sweep_ctrl --gpio_beam_trig--> Rx beamformer
 ADC --> rx_capture --> fft_engine --> chan_est --> fft_engine --> range_profile_buf
          (window,       (forward,      (Y*W)       (inverse,       (two banks)
           CP removal)    OFDM demod)                range IFFT)
```

All blocks run in one clock domain and move one complex sample per clock.
Blocks talk over valid/ready streams, so back-pressure propagates from the
profile RAM back to the capture.

## One beam, step by step

1. **Transmit.** `tx_waveform_player` reads its RAM from address 0 to
   `TX_LEN-1` and starts again, one sample per clock. Software loads the
   RAM with the CP first, then the 4096 symbol samples. `sym_start` is high
   with the DAC sample from address 0, which is the first CP sample.
2. **Capture window.** When the sweep controller arms it, `rx_capture` waits
   for the next `sym_start`. It then drops `CAP_DELAY + CP_LEN` ADC samples
   and forwards the next 4096. `CAP_DELAY` is the fixed DAC-to-ADC latency
   that remains after the RFSoC's multi-tile synchronization has aligned the
   converter tiles. Measure it once (for example with a cable loopback) and
   write it to the register. An echo delayed by `r` samples, with
   `r ≤ CP_LEN`, then shows up as a cyclic shift by `r` of the transmitted
   symbol. At 491.52 MS/s this covers about 88 m of range.
3. **OFDM demodulation.** The first `fft_engine` takes the 4096 samples in
   bit-reversed order into its memory. It then runs 12 stages of 2048
   radix-2 butterflies, one butterfly per clock (24,576 cycles). It streams
   out Y[k] in natural bin order.
4. **Channel estimation.** `chan_est` multiplies each bin by a weight W[k]
   from a RAM written by software: H[k] = Y[k]·W[k] / 2^15. Use
   W[k] = conj(X[k]) / |X[k]|² (in Q1.15) for the transmitted symbol X, and
   0 on unused subcarriers. The multiply then equals a zero-forcing division
   by the known symbol, with no divider in hardware. For QPSK this is just a
   scaled conj(X).
5. **Range IFFT.** The second `fft_engine`, with `inverse = 1`, transforms
   H back. Its output bin n is the echo at delay n samples.
6. **Store.** `range_profile_buf` keeps the first `BINS` bins (all 4096 by
   default) as 16+16-bit words in one of two banks. It marks the bank full and
   tags it with the beam number.

The sweep controller raises the GPIO trigger as soon as the capture in step 2
ends, not when the profile is done. The beamformer therefore moves and settles
while steps 3–6 are still running on the previous beam. The next capture waits
until three things hold: the trigger pulse has ended, the `SETTLE` time has
passed, and the demodulating FFT is free to load.

## Fixed-point format

This is the least obvious part.

| point in the chain | format |
|---|---|
| DAC, ADC, TX RAM, profile RAM | 16-bit signed I and Q; I in bits 15:0, Q in bits 31:16 of a 32-bit word |
| after `rx_capture` | 24-bit signed I and Q; the ADC value is shifted left 8 bits (`IN_SHIFT`) |
| FFT butterflies | 24-bit data, 18-bit twiddles (Q1.17). Every stage halves its result (arithmetic shift, rounds toward −∞) and saturates, so each transform scales by 1/N |
| `chan_est` | 24-bit × Q1.15 weight, shifted right 15, saturated to 24 bits |
| profile RAM | 24-bit IFFT output, shifted right `OUT_SHIFT` (default 0), saturated to 16 bits |

Scaling for a unit-gain echo: let the TX symbol be `S · IDFT_unscaled(X)`, with
QPSK X = ±1±j on 3300 subcarriers. The profile peak is then about
`256 · S · g · 3300/4096`, where g is the echo gain. The end-to-end test uses
S = 37, i.e. about 3000 rms on the DAC. A 0.6 echo gives a peak of about
4580. Errors against a double-precision model stay below 10 LSB in every bin.
Raise `OUT_SHIFT` if strong self-interference saturates the 16-bit profile
words.

## Back-pressure and the two profile banks

Software must read a bank and release it (CMD bit 1 or 2) before the writer
can use that bank again. If the writer's next bank is still full, its
`in_ready` drops and the whole pipeline waits in turn: IFFT unload, then
`chan_est`, then the FFT unload. The sweep controller arms a capture only when
the demodulating FFT is in its load phase. So a slow reader delays the sweep
but never loses or overwrites a profile. `STALLS` counts the cycles spent
waiting. `rx_capture` still has an `overrun` flag, because ADC samples cannot
be held back. The sequencing above keeps it from firing, and the flag is
there to show if it ever does.

## Throughput

Measured in the full-size testbench, before any stall: the interval between
captures is **35,072 cycles per beam**. The two FFT engines form a two-stage
pipeline. Each stage takes about 4.4 k cycles to load, 24.6 k to compute and
4.1 k to unload. A full tensor of 441 beam pairs (21 receive sweeps) takes
16.1 M cycles from the first sweep start to the last sweep end, including
the gap before each sweep's first capture. That is 32.8 ms at a 491.52 MHz
sample clock, well inside the 200 ms full sweep that the original system
reports. The 200 ms budget is met down to a clock of about 81 MHz. The time the host needs to step the transmit beam over USB between
receive sweeps is not included.

## Register map (AXI4-Lite, 32-bit words)

Address bits [17:15] select the region and bits [14:2] are the word index.

| region | byte address | access | contents |
|---|---|---|---|
| registers | 0x00000 | | see below |
| reference RAM | 0x08000 + 4k | W | W[k], k = 0…4095 |
| TX waveform RAM | 0x10000 + 4n | R/W | sample n, n < 8192 |
| profile RAM | 0x18000 + 4·(bank·4096 + bin) | R | range profile words |

| offset | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | RW | bit 0: play the TX waveform |
| 0x04 | CMD | W | bit 0: start sweep; bit 1/2: release bank 0/1; bit 3: clear sticky flags |
| 0x08 | STATUS | R | bit 0: sweep busy; bit 1: sweep done (sticky); bits 3:2: bank full; bit 4: last bank written; bit 5: capture overrun (sticky) |
| 0x0C | TX_LEN | RW | samples per TX period (reset 4384) |
| 0x10 | CAP_DELAY | RW | loop delay, samples |
| 0x14 | NUM_BEAMS | RW | receive beams per sweep (reset 21) |
| 0x18 | SETTLE | RW | wait after a trigger before the next capture, cycles (reset 256) |
| 0x1C | PROFILES | R | profiles written in this sweep |
| 0x20 / 0x24 | BANK0_BEAM / BANK1_BEAM | R | beam index of the profile in each bank |
| 0x28 | TRIG_COUNT | R | GPIO rising edges since reset |
| 0x2C | STALLS | R | cycles stalled on a full bank |

A sweep, from software's side:

1. Load the TX RAM and the reference RAM.
2. Write `CAP_DELAY` and set CTRL.0.
3. Write CMD.0.
4. Repeatedly poll STATUS bit 2 + (p mod 2). When it is set, read bank
   p mod 2 and release it.
5. Stop after NUM_BEAMS profiles. `irq_sweep_done` pulses once the last
   profile is stored.
6. Step the transmit beam and start the next sweep.

The slave accepts one write and one read at a time, ignores WSTRB and always
answers OKAY. Read data arrives three cycles after the AR handshake.
Assertions in `axil_regs` check that BVALID and RVALID (with stable RDATA)
hold until they are accepted.

## What is outside this RTL

The ARM processing system, the RF data converters and their multi-tile
synchronization, and the mmWave beamformers are vendor or commercial parts.
Their connections are the ports of `isac_sensing_top`:

* AXI4-Lite slave `s_axi_*`;
* `dac_i/q/valid` and `adc_i/q/valid`, one complex sample per clock;
* `gpio_beam_trig`;
* `irq_sweep_done`.

The waveform generator and all detection and tracking algorithms are host
software.

## Where this design chooses for itself

The original system gives these steps and their order, but not their internals:

* **Memories.** The TX RAM holds one CP-OFDM symbol (depth 8192, played
  cyclically), with one symbol per range profile.
* **FFT.** A single-butterfly, in-place radix-2 engine, used twice. It
  favours area over streaming at the full sample rate, which the sweep-time
  budget allows.
* **Channel estimation.** A software-loaded zero-forcing weight RAM.
* **Capture timing.** The window is timed from the TX player's symbol marker
  plus a delay register.
* **Profile storage.** Two profile banks with back-pressure. Profiles are
  stored complex; software forms the power.
* **Interfaces.** An AXI4-Lite register map. The GPIO pulse is 16 cycles wide,
  and a trigger follows every capture, the last one included, so that the
  beamformer's list wraps back to its first direction.
* **Clocking.** One clock for converters and processing. A real RFSoC build
  would put several samples per fabric clock, with clock-domain crossings
  at the converters.

## Simulating

Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops itself. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/isac_pkg.sv tb/tb_dsp_pkg.sv tb/tb_isac_sensing_top.sv \
    --top-module tb_isac_sensing_top
./obj_dir/Vtb_isac_sensing_top
```

| testbench | what it shows |
|---|---|
| `tb_isac_sensing_top` | One full sweep of 21 beams at the default size. A channel model with self-interference and two reflectors whose strength depends on the beam. Every profile bin is checked against a floating-point model. Also covers bank back-pressure, per-beam timing and the GPIO edges. Runs in a few seconds. |
| `tb_ra_tensor_sweep` | A whole range-angle tensor: 21 receive sweeps, with the transmit beam stepped by the software model between them. That is 441 beam pairs, with the first 128 range bins of each profile checked against the model. Both reflectors must peak at their own beam pairs. The PL time for the tensor must stay under 200 ms; it measures 16.1 M cycles, or 32.8 ms at 491.52 MHz. Runs in about 15 s. |
| `tb_fft_engine` | 4096-point FFT and IFFT against a double-precision FFT; the exact compute latency. |
| `tb_chan_est` | Bit-exact complex multiply and saturation, under random stalls. |
| `tb_rx_capture` | Window position for several delays, CP removal, overrun. |
| `tb_tx_waveform_player` | Gap-free cyclic playback, symbol marker, read-back. |
| `tb_range_profile_buf` | Bank alternation, tags, saturation, stall with no data loss. |
| `tb_beam_sweep_ctrl` | One capture and one trigger edge per beam, pulse width, settle time, end of sweep. |
| `tb_axil_regs` | Register map, command pulses, sticky flags, memory windows, read latency. |

`tb_dsp_pkg` holds the double-precision reference FFT that the testbenches
share.

## Changing it

* `N`, `CP` and `BINS` on `isac_sensing_top` change the numerology. The FFT
  needs a power of two. The register map assumes at most 8192 words per
  region.
* Bits 15:0 of `CAP_DELAY` are used, so the loop delay can be up to 65,535
  samples.
* Longer waveforms (several symbols) need only a larger `TX_DEPTH` and
  `TX_LEN`. The capture still takes the first symbol after the marker.
