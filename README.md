# HISPEC: a full-Stokes polyphase spectrometer for a 13-beam 21-cm receiver

The Parkes 21-cm multibeam receiver has 13 dual-polarisation feeds, which
makes 26 IF signals. The HIPSR signal processor digitises each of them with
8 bits at 800 Msample/s and gives each beam an FPGA board of its own. In the
wide-band spectral-line mode (`HISPEC_400_8192`), each board turns its beam's
X and Y polarisations into 8192-channel spectra of the 400 MHz band. The
spectra carry the auto products XX\*, YY\* and the cross product XY\*, so all
four Stokes parameters follow from them. Spectra are integrated on the board
for 2–5 s. The board also measures total power with the calibration noise
diode switched on and off (a noise adding radiometer), and all boards start
their spectra and their diode cycles on a shared one-pulse-per-second (1PPS)
edge.

This repository holds synthesizable SystemVerilog for that per-board
firmware, plus self-checking testbenches. The filterbank is a 4-tap
Hamming-windowed polyphase filterbank (PFB) followed by an FFT, so the
channels are flat-topped and leak about 50 dB less into their neighbours
than a plain FFT or an autocorrelation spectrometer. That isolation is why
the design uses a PFB at all.

## Signal flow

```
adc_x[0..3] ─ 4 × pfb_fir ─ fft_wideband ─┐ 2 channels/clock
                                          ├─ 2 × cross_mult ─ vector_acc ─┐
adc_y[0..3] ─ 4 × pfb_fir ─ fft_wideband ─┘                               ├─ ctrl_regs ─ control bus
adc_x, adc_y ─────────────────────────────────────────── nar_power ───────┘
pps ─ sync_gen ──(sync, frame_sync)── noise_cal_ctrl ─ cal_gpio
```

| file | role |
|---|---|
| `rtl/hipsr_pkg.sv` | constants (including `LANES` = 4), `cplx_t` (18+18 bit complex), `corr_t` (four 37-bit products), saturation helper |
| `rtl/sync_gen.sv` | arm + PPS edge → `sync`; `frame_sync` every 4096 clocks (16384 samples) |
| `rtl/pfb_fir.sv` | one lane of the 4-tap polyphase FIR with a Hamming-windowed sinc prototype |
| `rtl/fft_sdf_stage.sv`, `rtl/fft_r2sdf.sv` | streaming radix-2 SDF FFT, one sample per clock (used as the 4096-point lane FFT) |
| `rtl/fft_wideband.sv` | 16384-point FFT of a real signal arriving 4 samples per clock |
| `rtl/cross_mult.sv` | XX\*, YY\*, Re XY\*, Im XY\* of one channel |
| `rtl/vector_acc.sv` | double-buffered 8192 × 4 × 64-bit integrator, two channels per clock |
| `rtl/nar_power.sv` | on/off total-power sums and sample counts |
| `rtl/noise_cal_ctrl.sv` | 128 Hz diode square wave, phase-locked to `sync` |
| `rtl/ctrl_regs.sv` | register file and spectrum window for the control processor |
| `rtl/hispec_top.sv` | one board |

The digitiser delivers 800 Msample/s per polarisation and the fabric runs at
200 MHz, so every clock carries four consecutive samples: `adc_x[q]` in
clock m is sample 4m+q. Everything after the digitiser is a stream with no
back-pressure. Frame boundaries travel with the data as a one-cycle `sync`
flag, in the usual radio-astronomy gateware style. A 16384-sample frame
takes 4096 clocks (20.48 µs) to enter and its 8192 channels take 4096
clocks to leave, two per clock, so the pipeline keeps up with the sample
rate exactly.

## The polyphase filterbank at four samples per clock

### Prototype filter and FIR lanes

With N = 16384 samples per frame, TAPS = 4 and M = TAPS·N, the prototype
filter is

```
h[k] = round( (0.54 − 0.46·cos(2πk/(M−1))) · sinc((k − M/2)/N) · (2^17 − 1) ),   k = 0 … M−1
```

This is a Hamming window over a sinc whose main lobe is one channel wide.
For input sample n at phase p = n mod N, the FIR output is

```
y[n] = sat18( ( Σ_{t=0..3} h[(3−t)·N + p] · x[n − t·N] + 128 ) >>> 8 )
```

The newest frame meets the last section of the prototype. The FIR needs no
interaction between samples of different phases, so it splits cleanly into
four lanes: `pfb_fir` with `LANE` = q handles only phases p ≡ q (mod 4). It
keeps three delay lines of N/4 = 4096 words, one per older frame, each a RAM
addressed by the lane's phase counter, and a ROM holding only its own
coefficients h[(3−t)·N + 4p′ + q]. The ROMs are computed at elaboration time
from the formula above, so no table file is needed. The 8-bit right shift
keeps the worst-case sum, about 1.1 × 128 × 2^17, inside 18 bits, so the
saturation flag never fires for 8-bit input; it is kept only as a guard.

### Wideband FFT

The transform has to take four samples per clock. `fft_wideband` splits the
16384-point DFT into a 4096-point part along each lane and a 4-point part
across the lanes. With n = 4m + q and k = k1 + 4096·k2:

```
Z_q[k1] = Σ_m y[4m + q] · W_4096^(m·k1)              lane FFT (fft_r2sdf, one per lane)
X[k]    = Σ_q ( Z_q[k1] · W_16384^(q·k1) ) · W_4^(q·k2)
```

All four lane FFTs run in lock-step and emit the same k1 in the same clock.
One register stage multiplies lane q by the twiddle W_16384^(q·k1); the next
forms the 4-point sums. Because the input is real, only X[k] with k < 8192
is needed, i.e. k2 = 0 and 1, so each clock delivers two channels, k1 and
k1 + 4096. The other two 4-point outputs are never formed.

Each lane FFT (`fft_r2sdf`) is a radix-2 decimation-in-frequency pipeline with
a single-path delay feedback (SDF): 12 stages of lengths 4096, 2048, …, 2. A
stage of length L holds L/2 words in a feedback RAM:

* During the first half of each length-L block, inputs go into the RAM. The
  RAM's old contents leave the stage, which are the differences from the
  previous block, multiplied by W_L^i = exp(−2πj·i/L).
* During the second half, each input b meets its partner a from the RAM.
  a+b leaves the stage at once, and a−b goes back into the RAM.

Scaling: bits 0…11 of the runtime `FFT_SHIFT` register halve the results of
the twelve lane stages, and bits 12 and 13 each halve the 4-point sum. With
all 14 bits set the output is DFT/N and cannot overflow. Clearing bits buys
dynamic range for weak signals but risks saturation, which sets a sticky
status bit. Twiddles have 18 bits, 16 of them fraction bits, and are
generated at elaboration time.

Two points need care:

* **Order.** k1 leaves in bit-reversed order: output clock p carries k1 =
  bitrev₁₂(p), and `out_bin` gives k1. Nothing reorders the stream. Instead
  `vector_acc` writes each channel at its own address (one memory bank per
  output, k1 and k1 + 4096), so memory and readout are in natural channel
  order.
* **Real input.** The FIR outputs are real. They go onto the real inputs of
  complex lane FFTs; the discarded half of the spectrum is simply not
  computed in the cross-lane stage.

Latency from `in_sync` at the FFT input to its `out_sync` is
N/4 − 1 + log₂(N/4) + 2 = 4109 clocks. The FIR adds 1 clock and
`cross_mult` adds 1.

## Correlation and integration

`cross_mult` forms XX\* = |X|², YY\* = |Y|², Re XY\* = XrYr + XiYi and
Im XY\* = XiYr − XrYi, all exact in 37 bits. YX\* is the conjugate of XY\*.
In the usual linear-feed convention the Stokes parameters are
I = XX\*+YY\*, Q = XX\*−YY\*, U = 2·Re XY\* and V = −2·Im XY\*. They are left
to software.

`vector_acc` integrates `ACC_LEN` frames, two channels per clock. At 800 Msample/s one frame lasts
20.48 µs, so 2 s is 97 656 frames and 5 s is 244 140. The reset value is
97 656. There are two banks. One accumulates, and the other holds the last
finished integration for the processor to read. They swap when an
integration ends, which pulses `acc_done` and increments `ACC_CNT`. The
first frame of an integration overwrites the bank, and later frames add to
it. Sums need up to 55 bits, and the banks are 64 bits wide.

**Resynchronisation** is the subtle part. A new `sync` restarts the framing
at the digitiser side. The FFT outputs still hold up to two frames that
began before the sync, and the FIR's delay lines need three more frames
before they hold whole, aligned frames. The top therefore delays the
accumulator's `restart` by N/4 + log₂(N/4) + 2 clocks, which lands it where
the first post-sync frame leaves `cross_mult`. The accumulator then drops
`SKIP` = TAPS − 1 = 3 frames and starts integrating with the fourth. The
end-to-end testbench checks this: its reference model integrates exactly
frames 3 … 3+ACC_LEN−1 after the sync.

## Synchronisation and the noise adding radiometer

`sync_gen` takes an arm request from software. On the next rising edge of
the 1PPS input, it pulses `sync` and restarts the frame counter. The PPS
passes through a two-flop synchroniser, so `sync` comes 3 cycles after the
edge is sampled. That latency is the same on every board, which keeps all
boards aligned to within one clock.

`noise_cal_ctrl` restarts on `sync` with the diode off, and toggles it every
`CAL_HALF` cycles. The reset value is 781 250 cycles, which is 128 Hz at
200 MHz. On the board configured as master (`CTRL.MASTER`), the state goes
out on `cal_gpio` to the receiver's calibration control unit. Every board
computes the same state, so each one knows which of its samples had the
diode on.

`nar_power` sums x² and y² of the raw 8-bit samples into separate on and off
accumulators (all four samples of a clock at once), and counts the samples
in each state. Its window is `ACC_LEN`·4096 clocks = `ACC_LEN`·16384
samples, one spectral integration, starting one clock after the sync. The system temperature follows from

```
Tsys = Tcal / ( (Pon/Non) / (Poff/Noff) − 1 )
```

## Control bus and register map

The processor bus is a simple single-transfer protocol. The requester holds
`bus_req` for one cycle, together with `bus_we`, `bus_addr` (an 18-bit word
address) and `bus_wdata`. `bus_ack` comes exactly two cycles later, with
`bus_rdata` for reads. The next request may come the cycle after the
acknowledge; an assertion checks this.

| word addr | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | W / RW | bit0 ARM (pulse), bit1 CAL_EN (reset 1), bit2 MASTER, bit3 CLR_OVF (pulse) |
| 0x01 | ACC_LEN | RW | frames per integration (reset 97656) |
| 0x02 | FFT_SHIFT | RW | per-stage halving, bit s = stage of length 16384>>s (reset all ones) |
| 0x03 | CAL_HALF | RW | diode half period in clocks (reset 781250) |
| 0x04 | STATUS | R | bit0 FFT overflow seen, bit1 FIR overflow seen, bit2 armed, bit3 cal_on |
| 0x05 | ACC_CNT | R | integrations finished since the last sync |
| 0x06 | NAR_CNT | R | NAR windows finished since reset |
| 0x08–0x0F | NAR | R | Pon_X, Poff_X, Pon_Y, Poff_Y, 64 bits each, low word first |
| 0x10 / 0x11 | NAR_NON / NAR_NOFF | R | sample counts of the last window |
| 0x20000 + {prod[1:0], chan[12:0], word} | SPECTRUM | R | finished bank; prod 0 XX\*, 1 YY\*, 2 Re XY\*, 3 Im XY\* |

A typical start sequence: write ACC_LEN, CAL_HALF and FFT_SHIFT; write
CTRL = 0b111 (arm, calibration on, master) on the master board and 0b011 on
the others; the next PPS starts everyone. Then poll ACC_CNT and read the
spectrum window after each increment. A whole integration is available for
reading the frozen bank.

## Numbers: what is fixed and what was chosen

| quantity | value | origin |
|---|---|---|
| channels / transform length | 8192 / 16384 | spectrometer specification |
| PFB taps, window | 4, Hamming | specification |
| sample width | 8 bit | specification |
| sample rate | 800 Msample/s | specification |
| fabric clock | 200 MHz (5 ns) | specification |
| diode rate | 128 Hz | specification (elsewhere described as roughly 100 Hz) |
| integration | 2–5 s | specification |
| prototype formula, 18-bit coefficients, FIR shift | as above | design choice |
| samples per clock | 4 | follows from 800 Msample/s at 200 MHz |
| FFT architecture, 18-bit data/twiddles, shift schedule | 4 lanes of radix-2 SDF + 4-point combine | design choice |
| accumulator width, double buffering, frame skip | 64 bit, 2 banks, 3 frames | design choice |
| bus protocol and register map | as above | design choice |

## Where this RTL departs from the original system

* **FFT structure.** The lane-parallel split and the SDF lane FFTs are this
  design's; the original firmware's FFT internals are not described. Each
  lane FFT is complex with a zero imaginary input. Packing two lanes into one
  complex FFT would halve the lane FFT hardware, but needs a reorder buffer
  to pair bins k and N−k.
* **Bus.** The PowerPC's On-chip Peripheral Bus is modelled by the simple
  protocol above, not by the real OPB signal set.
* **Total power** for the radiometer comes from the raw samples, not from
  the channelised data, and no samples are blanked around diode
  transitions.
* **Not included:** the 200 MHz / 16384-channel mode (half-band filter and
  complex mixer in front of the PFB), the 1024-channel pulsar mode
  (64 µs integration, 8-bit requantisation, 10 GbE packetisation), the
  10 GbE / XAUI cores, the digitiser card and the processor itself. The
  digitiser samples, the PPS, the diode control pin and the processor bus
  are ports of `hispec_top`.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | checks |
|---|---|
| `tb_sync_gen` | no sync without arm; sync latency 3 cycles; frame period before and after sync |
| `tb_noise_cal_ctrl` | diode state and toggle pulse on every cycle for three half periods; GPIO only on master; disable |
| `tb_pfb_fir` | bit-exact against an independently computed prototype and 4-frame sum, for a single-lane instance and for a set of four lanes fed four samples per clock |
| `tb_fft_r2sdf` | 64-point transform against a direct DFT/N (tolerance 8 LSB); bin order; latency N−1+log₂N |
| `tb_fft_wideband` | 64-point real transform at 4 samples per clock against a direct DFT/N; both outputs, k1 order, latency N/4−1+log₂(N/4)+2 |
| `tb_cross_mult` | exact products for random full-range inputs |
| `tb_vector_acc` | sums per channel and product (two channels per clock) across bank swaps; skip of 3 frames after restart |
| `tb_nar_power` | on/off sums and counts per window, four samples per clock |
| `tb_ctrl_regs` | register round trips, ARM pulse, sticky flags, NAR words, spectrum window, 2-cycle acknowledge |
| `tb_hispec_top` | whole board at N = 64 (all 32 channels), 100-frame integration |
| `tb_hispec_full` | whole board at the default N = 16384, 2-frame integration, 24 channels |

The two end-to-end testbenches share `tb/hispec_tb_body.svh`. The stimulus
on each polarisation is an off-bin tone plus pseudo-random noise. The
reference model uses a bit-exact FIR model, a floating-point DFT and the
product sums. The testbenches also check the radiometer sums against the
known diode phase, the integration period, the FFT overflow flag (by
clearing `FFT_SHIFT`) and a second synchronisation. They count each of
these mechanisms and fail if one never occurs.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/hipsr_pkg.sv tb/tb_hispec_full.sv --top-module tb_hispec_full
./obj_dir/Vtb_hispec_full
```

The full-size run builds in well under a minute and simulates in a few seconds.

## Changing the design

`hispec_top` parameters: `N_FFT` (transform length, a power of two of at
least 16; there are N_FFT/2 channels), `TAPS`, `ACC_LEN0` and `CAL_HALF0` (reset values of
the registers). Word widths live in `hipsr_pkg`. `DW` sets the complex
component width; with it, `PW` = 2·DW+1 and the products grow
automatically. `pfb_fir.SHIFT` must be retuned if the input width or
coefficient width changes. `LANES` in `hipsr_pkg` is the sample rate over the
clock rate; `fft_wideband` and `vector_acc` take any power of two from 2
upwards, and the top keeps LANES/2 channels per clock. For a 1024-channel
spectrometer, set `N_FFT = 2048`.
