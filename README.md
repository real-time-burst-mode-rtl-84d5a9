# Burst-mode DSP for a 25 Gbit/s PON upstream, in SystemVerilog

In a passive optical network the upstream direction is shared: every
optical network unit sends short bursts, and each burst arrives at the
receiver with its own power, clock phase and channel. A continuous-mode
receiver, whose timing loop and equaliser take many thousands of symbols to
converge, cannot lock onto a burst in time. This design fixes that with a
short preamble that drives three feed-forward estimates:

* **Preamble A** (192 symbols of 0,1,0,1,...) is two tones at half the baud
  rate. It reveals that a burst is present (a power peak in one frequency
  bin) and, from the phase between the two tones, the sampling phase offset.
* **Preamble B** (96 symbols, `[Pn, Pn, -Pn]` with a 32-symbol sequence Pn)
  marks the exact start of the frame.
* **Preamble C** (768 pseudo-random symbols) gives the equaliser enough known
  data to compute its initial taps in one step (MMSE). Decision-directed LMS
  then tracks the taps over the payload.

All processing runs in the frequency domain on overlapping blocks, called
beats, with everything in parallel. At 1 sample per symbol a beat holds
96 new symbols plus 32 symbols of overlap, which gives 128 points. At
1.125 samples per symbol it holds 108 new samples plus 36 of overlap, which
gives 144 points.

## Signal flow

Transmitter (`bmdsp_tx`), one beat per step:

1. 96 bits are mapped to PAM2 symbols (`pam2_map`).
2. 32 symbols of overlap are added, giving 128.
3. A 128-point FFT follows.
4. Bins 0..71 and 56..127 are placed side by side into 144 bins. This
   resamples the signal by 9/8.
5. Root-raised-cosine shaping (roll-off 0.1) and a 144-point IFFT follow.
6. The 36-sample overlap is dropped.
7. The 108-sample beats are re-packed into 128-lane DAC words (`gearbox`).
   Preamble A, B and C come from a constant table. The payload bits are
   requested beat by beat through `bits_req`.

Receiver (`bmdsp_rx`):

```
ADC 128 lanes -> gearbox 108 -> overlap 144 -> FFT144 -> RRC
   |-> frame_detect + spo_init (preamble A) -> tau0
   |-> bm_fdtr (acquisition) -> drop roll-off bins -> IFFT128 -> frame_sync (preamble B)
 frame_adjust (buffer of 108-lane beats, re-read from the frame start)
   -> overlap 144 -> FFT144 -> RRC -> bm_fdtr (loaded with tau0) -> drop bins -> bm_fde
   -> pam2_demap -> 96 bits per beat
```

The receiver has two chains. The acquisition chain looks for the burst and
its start. The data chain re-reads the buffered samples from the frame
start, so no sample is lost while acquisition takes its 168 cycles.

## Timing recovery in the frequency domain (`bm_fdtr`, `spo_init`)

A time shift of tau samples becomes a phase ramp across the bins.
`bm_fdtr` therefore multiplies bin k by exp(-j2πkτ/N), read from a
1024-entry phase table.

* **Initial tau.** tau comes first from `spo_init`:
  τ0 = (sps/2π)·arg[X(K)X*(N−K)], with K = 64. The angle is computed by a
  16-step CORDIC.
* **Tracking.** A Godard detector sums Im(X(k)X*(k+N/sps)) over the
  roll-off bins. It feeds a PI loop filter and an NCO that splits tau into
  an integer part m and a fraction μ = η/W.
* **Divider.** The divider for μ takes 39 cycles, and m is delayed by the
  same amount.
* **Design choices (not in the source).** The loop gains, the 1024-entry
  table and the reading of the NCO step as 1 + the filter output are this
  design's own.

## Frame synchronisation (`frame_sync`)

Two successive 96-symbol beats form a 192-symbol window. It works in three
stages:

1. **Correlations.** 161 sliding correlations with Pn, using adders only
   because Pn is ±1. This takes 18 cycles.
2. **Combination.** The correlations are combined with signs (+, +, −) at
   offsets 0, 32 and 64, giving 225 candidates. This takes 6 cycles.
3. **Maximum.** An 8-level comparator tree finds the largest candidate,
   padded to 37 cycles. The result appears 61 cycles after the window's
   second beat.

The peak index j gives the frame start p1 = j − 64 at 1 sample per symbol,
and pos = ⌊1.125·p1⌋ at the data-path rate.

Three rules are this design's choice:

* Only candidates that hold a whole preamble are kept.
* Each of the three partial sums must carry at least 1/8 of the total.
* The peak must exceed 11/32 of the window's Σ|x|.

Together they make the decision independent of the received amplitude.

## Equaliser (`bm_fde`)

* **Initial taps.** Over the 8 beats of Preamble C, the taps are
  W = Σ Y·X*/Σ |Y|². X is the known spectrum of each C beat, built into
  the RTL from the sequence. The 256 real divisions take 59 cycles.
* **Tracking.** After the taps are loaded, each payload beat is equalised
  and returned to the time domain with a 128-point IFFT. Only 8 of its 128
  symbols (every 16th) are sliced.
* **Cheap error spectrum.** The 8 errors go through an 8-point FFT.
  Repeating the 8-point result 16 times gives the error spectrum of the
  sub-sampled signal. This replaces a full 128-point FFT in the LMS loop.
* **Update.** The taps are updated as W ← W − 2^-14·E·Y*.

## Fixed point and latencies

| Item | Value |
|---|---|
| sample | 16-bit signed real and imaginary (`cplx_t` in `bmdsp_pkg`) |
| coefficients | Q2.14 |
| radix-2 layer | ×1/2 with rounding; the 128-point FFT is DFT/128 and the inverse is the exact IDFT |
| radix-3 layer | unscaled; the 144-point FFT is DFT/16 |
| FFT128 / FFT144 / FFT8 | 46 / 53 / 18 cycles |
| frame detection | 29 cycles |
| frame sync | 62 cycles (including result register) |
| MMSE / LMS dividers | 59 cycles, LMS loop delay 84 cycles |

There is one clock. Where the original platform uses a 261.12 MHz domain
(108 lanes) and a 220.32 MHz domain (128 lanes), this RTL uses valid
strobes. The gearbox absorbs the 27:32 rate ratio.

## Status and known problems

* The FFTs, gearbox, overlap, frame synchronisation and PAM2 map/demap have
  self-checking testbenches that pass.
* **End-to-end test.** `tb_bmdsp_top` loops the transmitter into the
  receiver through a delay and noise. It runs two full-size bursts.
  * Burst detection, SPO hand-off, frame synchronisation, frame adjustment,
    the MMSE tap load, the DD-LMS updates, FIFO idle cycles and re-arming
    all happen.
  * **The payload is not recovered:** the bit error ratio is about one half.
    The fault lies between the data-path timing recovery and the equaliser
    output and has not been found yet. The equaliser should be treated as
    unverified.
* The sign of the timing-loop gains has not been verified with a drifting
  clock.
* The DAC and ADC are outside the design. The top exposes their 128-lane
  sample buses.

## Simulating

Every testbench in `tb/` is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary -j 8 --timing rtl/bmdsp_pkg.sv rtl/*.sv tb/tb_frame_sync.sv \
          --top-module tb_frame_sync -Mdir obj && ./obj/Vtb_frame_sync
```

The full-size end-to-end test (`tb_bmdsp_top`) takes a few minutes to
compile and a few seconds to run.
