# Pulse-trigger sampler for lunar Cherenkov observations

A particle cascade in the Moon's outer layers gives off a radio pulse that
lasts about a nanosecond. A radio telescope can see such a pulse only if it
looks at the raw voltage from the receiver: the pulse must be caught in real
time, before any averaging. This RTL is the digital part of one antenna's
pulse search. The receiver's two linear polarisations, A and B, cover
1.2–1.8 GHz. Each is dedispersed by an analogue filter and sampled at
2.048 GS/s with 8 bits. The logic keeps the most recent samples of both
polarisations in a history buffer and watches every sample. If the magnitude
of any sample of either polarisation exceeds an adjustable threshold, it
stops the buffers a chosen number of samples later. It then sends both
histories, with the sample-accurate time of the triggering sample, to the
recording computer. While it does so the antenna cannot trigger ("dead
time"). Each antenna runs its own copy, because the antennas cannot talk to
each other on these timescales.

The trigger is deliberately simple. Each polarisation is tested on its own,
and each sample is tested on its own: there is no sum of the polarisations'
powers and no interpolation between samples. At 2 GS/s nothing much more
elaborate fits in the logic.

## Block structure

```
  adc_a[8] ──┬──────────────────► sample_buffer (A) ──┐
             │                                        ├──► readout_streamer ──► out_* frame stream
  adc_b[8] ──┼──┬───────────────► sample_buffer (B) ──┘            ▲
             ▼  ▼                        ▲ write port              │ rd_start / rd_done
          threshold_detect ───────► capture_ctrl ◄──── timestamp_counter
           (hit_a, hit_b, lane)      (armed, dead)
```

| Module | Role |
|---|---|
| `lunaska_pkg` | Default sizes, the controller and streamer state types, and the header field positions. |
| `threshold_detect` | Tests \|v\| > threshold for every sample of both polarisations. Reports a hit per polarisation and the earliest lane that fired. Output is registered, one clock. |
| `sample_buffer` | One per polarisation: a simple dual-port RAM of `DEPTH` words of `LANES` samples, with a registered read. Used as a circular buffer. |
| `timestamp_counter` | Counts samples, not clocks: it advances by `LANES` per clock. It can be loaded with an epoch. |
| `capture_ctrl` | Write pointer, arming, trigger, post-trigger recording, freeze, hand-over to the readout and re-arming. |
| `readout_streamer` | Turns a frozen capture into a frame on a valid/ready stream. |
| `lunaska_sampler_top` | Wires the blocks into one antenna's sampler. |

These are not part of the RTL. The top has ports where they connect:

- the receiver chain;
- the waveguide dedispersion filters;
- the two ADCs, which feed `adc_a` and `adc_b`;
- the 100 Mb/s Ethernet link to the control room, which takes `out_*`;
- the control link, which drives the configuration inputs.

## Samples, lanes and time

No FPGA fabric runs at 2.048 GHz, so the samples arrive in parallel. There
are `LANES` = 8 samples per clock and polarisation, on a 256 MHz clock.
`adc_a[0]` is the earliest sample of the word and `adc_a[7]` the latest.
Samples are two's complement. The magnitude of −128 counts as 128, so it
exceeds every 8-bit threshold below 128.

The time-stamp is a sample number. `ts_now` is the number of lane 0 of the
word arriving this clock. The time of the triggering sample is
`ts(word) + lane`, where `lane` is the lowest lane in which either
polarisation fired. With `ts_load` the counter can be set to an external
epoch; the load takes effect at the next clock.

## Trigger and capture sequence

This is the part that needs care. The controller has three states:

1. **ACQUIRE.** Both buffers take one word per clock at the write pointer,
   which wraps at `DEPTH`. The controller counts the words written since it
   last armed. It is **armed** once that count reaches `len − post`, so that
   the whole returned window is fresh data. Until then hits are ignored
   (hold-off).
2. A detector hit reaches the controller one clock after its word was
   written. If the controller is armed, that word is the **trigger word**.
   The controller records the trigger word's address and time-stamp, and
   the lane and the polarisations that fired.
3. **POST.** Writing goes on for exactly `post` more words, counting the one
   written in the clock where the trigger was seen. With `post = 0` that
   clock's write is suppressed, so the trigger word is the last word in the
   buffer.
4. **READOUT.** Both buffers are frozen and `rd_start` pulses. The window is
   the `len` words that end with the last post-trigger word. Its oldest
   word is at `(trigger_addr + post + 1 − len) mod DEPTH`, which the
   controller works out with two conditional subtractions, not a divider.
   Hits are ignored while frozen.
5. When the streamer reports `rd_done`, the controller goes back to ACQUIRE.
   It resets the fresh-word count and takes the window configuration again.

`armed` is the "sampling and ready to trigger" state, and `dead` is its
complement. The controller arms exactly `len − post + 2` clocks after the
last frame word is accepted: one clock for `done`, one to re-arm, then
`len − post` writes.

Configuration: `cfg_len_words` is the window per polarisation, in words
(1…`DEPTH`). `cfg_post_words` is the number of words recorded after the
trigger word. Both are taken at reset release and at every re-arm. They are
clamped to 1 ≤ len ≤ `DEPTH` and post ≤ len − 1. Thresholds `thr_a` and
`thr_b` act at once. A threshold of zero fires on any non-zero sample: the
sampler triggers as soon as it arms, which gives unbiased captures of the
received power for calibration.

## Frame format

The frame is a stream of 64-bit words (`out_data`, `out_valid`, `out_ready`,
`out_last`). A word stays unchanged until it is accepted.

| Word | Content |
|---|---|
| 0 | Time-stamp of the triggering sample (sample number). |
| 1 | `[15:0]` window length in words; `[23:16]` first lane over threshold; `[24]` A exceeded; `[25]` B exceeded; other bits 0. |
| 2 … len+1 | Polarisation A, oldest word first. Sample *i* of a word is in bits `[8i+7:8i]`. |
| len+2 … 2len+1 | Polarisation B, in the same order. `out_last` is set on the final word. |

The streamer reads both buffers at the same address, one word at a time, in
three steps: issue the read, capture the data, offer it. A word therefore
takes at least three clocks, so a 256-sample capture (32 words per
polarisation) is out in about 200 clocks, under a microsecond. The
published system's dead time was about 8 ms per microsecond of buffer. That
was set by the link to the control room, which this stream feeds through
its backpressure.

## Sizes

| Parameter | Default | Origin |
|---|---|---|
| `SAMPLE_W` | 8 | published ADC precision |
| `BUF_SAMPLES` | 16320 (2040 words, about 8 µs) | published maximum buffer |
| `LANES` | 8 | this design's choice |
| `TS_W` | 64 | this design's choice (a three-day run needs 49 bits) |

At the defaults the two buffers hold 261,120 memory bits. The logic around
them is about 460 flip-flops and 300 word-level cells.

The published observing modes all fit at the defaults:

- normal observing returned 256 samples per polarisation (32 words);
- timing calibration used the whole 16,320-sample buffer;
- sensitivity calibration set the thresholds to zero.

The published thresholds were 5.5–6 σ of the noise, giving trigger rates
of 40–50 Hz per polarisation. At the defaults the trigger logic is then dead
far less than 0.1 % of the time, not counting the link.

## Where this differs from, or adds to, the published system

The published description gives:

- two polarisations with 8-bit samples at 2.048 GS/s;
- the either-polarisation magnitude trigger with an adjustable threshold;
- a buffer of up to 16,320 samples per polarisation;
- the return of both buffers with a sample-accurate time-stamp;
- the dead time while a capture is being returned.

The following are this design's own choices:

- 8 parallel lanes per clock, and the order of the lanes;
- two's-complement samples, and "exceeds" read as strictly greater;
- a separate threshold for each polarisation (set both equal for a single
  threshold);
- the post-trigger part of the window, and the arming hold-off;
- configuration in words, taken when the sampler re-arms;
- the 64-bit time-stamp and its load port;
- the valid/ready frame stream and its layout;
- asynchronous active-low reset of the control registers (the buffers are
  not reset).

Not included:

- the analogue receiver and filters, and the ADCs;
- the Ethernet link protocol and the control interface, which the
  published description does not give;
- the 10-bit sampling that was recommended for later experiments (set
  `SAMPLE_W` to try it; the streamer then needs `SAMPLE_W·LANES` ≥ 64).

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/lunaska_pkg.sv tb/tb_lunaska_sampler_top.sv \
    --top-module tb_lunaska_sampler_top -o sim
./obj_dir/sim
```

- `tb_threshold_detect`, `tb_sample_buffer`, `tb_timestamp_counter`,
  `tb_capture_ctrl` and `tb_readout_streamer` test the blocks against
  reference models kept in the testbench. `tb_capture_ctrl` checks the
  window and hold-off rules against an independent model with a 20-word
  buffer.
- `tb_lunaska_sampler_top` runs the whole sampler with a 320-sample buffer.
  The input is noise plus pulses. It goes through A-only, B-only and
  both-polarisation triggers, the zero-threshold mode, full-buffer windows,
  a time-stamp reload, window changes and a stalling sink. It checks every
  frame word against the stored input history, checks the hold-off timing,
  and fails if any of these mechanisms never occurred.
- `tb_lunaska_full` uses the default sizes. It takes a 256-sample
  observing capture, a full 16,320-sample calibration capture and a
  zero-threshold capture, and checks each word for word.

The testbenches do not use x or z, so they also run on two-state
simulators.
