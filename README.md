# Dual-polarised IM-PM-FMCW transceiver for joint radar sensing and communication

One waveform does two jobs here. Each chirp of a frequency-modulated continuous-wave (FMCW)
radar also carries data, and it does so in two ways:

- **Index modulation (IM).** The chirp's bandwidth `b` and centre frequency `f` are picked
  from a small codebook. That choice carries `log2(NB*NF)` bits.
- **Phase modulation (PM).** The chirp is cut into `L` equal segments, and each segment gets
  an M-PSK phase. That carries `L*log2(M)` more bits.

A radar cannot use a plain FFT on such chirps. Their slope and start frequency change from
chirp to chirp, so a target would jump between range bins and its Doppler phase would be
scrambled. The radar receiver undoes both effects before the range-Doppler map is formed.

The communication receiver works per chirp:

1. Find the frame start with the pilot chirp.
2. Estimate the channel from that pilot.
3. Decide the IM symbol from the spectrum of the equalised chirp.
4. Rebuild the chirp without its phase code and read the PSK symbol of each segment.

Both polarisations (V and H) run this chain side by side, with independent data. The
cross-polarisation leakage between them is treated as interference by the channel estimator.

The RTL covers the digital baseband of one transceiver node: two transmitters, two radar
receive chains and two communication receivers. It does not cover the RF chains, converters,
antennas, the host processor or the radar back end that would detect targets on the map. Their
signals are ports of the top module `isac_top`.

## Numbers used

| Quantity | Default | Notes |
|---|---|---|
| Sample rate | 100 MS/s, one complex sample per clock | chosen here |
| Chirp | 1000 samples (10 µs) | |
| Segments per chirp | L = 10 | one phase change per µs |
| PSK order | M = 4 | |
| IM codebook bandwidths | 8: 40, 42, … 54 MHz | |
| IM codebook centre frequencies | 4: −3, −1, +1, +3 MHz | |
| Bits per data chirp | 5 IM + 20 PM = 25 | per polarisation |
| Frame | 50 chirps: one pilot, then 49 data chirps | |
| Pilot | plain FMCW chirp, 60 MHz wide, centred at 0 Hz | |
| Receiver FFT | 1024 points | |
| Range bins | 64 | |
| Doppler FFT | 64 points | |
| Phase smoothing span | β = 0.2 of a segment | |

All of these are in `rtl/isac_pkg.sv` or are module parameters.

The codebook keeps every chirp inside the 40–55 MHz band of the 2.4 GHz ISM configuration.
The centre-frequency and bandwidth steps are 2 MHz. The sample rate, the codebook size (8×4),
the pilot width and the FFT sizes are this design's choices.

Samples are signed 16 bit (`iq16_t`). Receiver arithmetic is signed 24 bit (`cplx24_t`).
Phases are fractions of a turn: 32 bit in the oscillators and 16 bit at the CORDIC.

## Transmitter (`isac_tx`, `im_mapper`, `pcfmcw_gen`)

A frame is `NCH_P` chirps sent back to back.

- **Chirp 0** is the pilot, a plain up-chirp over the whole band.
- **Chirps 1…NCH_P−1** are data chirps. Each takes one 25-bit word through a valid/ready
  handshake.

The word layout is `{sym[L-1], …, sym[0], IM index}`: the IM index is in the low 5 bits,
with `b = index / NF` and `f = index mod NF`.

`im_mapper` turns the word into three things:

- a start-frequency tuning word, `f − b/2`;
- a chirp-rate word, `b / (NS·FS)`;
- the L phase symbols.

Both tuning words are looked up in tables computed at elaboration.

`pcfmcw_gen` produces the phase `θ(n) = f0·n + k·n(n−1)/2` with a second-order accumulator.
It adds the segment's PSK phase and outputs `sincos` of the sum through a CORDIC, at amplitude
16383.

**Phase smoothing.** Abrupt phase steps at segment boundaries spread power outside the band.
They are smoothed by convolving `exp(jφ(t))` with a short window, β·Ts wide. The phase is
piecewise constant, so the filtered value near a boundary is exactly
`(1−w)·e^{jφa} + w·e^{jφb}`, where `w` is the part of the window beyond the boundary. The
generator computes that sum from a running-sum table of the window and takes its angle with a
CORDIC. The window is a binomial one, (2K+1 taps, K = β·Ts/2), used as an integer stand-in
for a truncated Gaussian whose width is otherwise unspecified. The phase is not smoothed
across chirp boundaries.

**Sensing-only mode.** Radar needs every chirp, so the chirp train never stops. A plain FMCW
chirp goes out in a data slot in two cases, and each such slot is counted in `idle_chirps`:

- `comm_en` is low;
- no data word is valid when the slot must be prepared.

Chirp `c+1` is prepared while chirp `c` is on air.

**Timing.** The first pilot sample appears 4 clocks after the clock edge that samples
`frame_start`. After that there is one sample per clock with no gaps.

## Radar receive chain (`radar_range_align`, `radar_phase_corr`, `radar_doppler`)

**Deramp and range alignment.** Each echo sample is mixed with the sample sent at the same
instant: `s = x·conj(r)`. A target at delay τ then produces a tone at `b_i·τ/Tc`, which moves
with the chirp's bandwidth. Instead of an FFT, `radar_range_align` evaluates the DTFT of `s`
at the frequency where bin `m` falls for *this* chirp's bandwidth:

```
R_i(m) = Σ_n s(n) · exp(−j2π · (b_i/b_ref) · m · n / NS)
```

- This places every target in bin `m = τ·b_ref`, whatever `b_i` is.
- The range grid is `τ_m = m/b_ref`, with `b_ref` the pilot bandwidth.
- All 64 bins accumulate in parallel, one multiply-accumulate per bin per sample.
- Results stream out during the next chirp.

A delay of D samples lands in bin `0.6·D`.

**IM phase correction.** After alignment, bin `m` of chirp `i` still has a phase that depends
on the chirp's centre frequency and slope. `radar_phase_corr` removes it:

```
φ_err,i(m) = 2π[(Δf_i − Δb_i/2)·τ_m − Δb_i/(2Tc)·τ_m²]
```

Here Δf and Δb are offsets from the pilot's centre and bandwidth. The terms are tabulated
per codebook entry as `A_i·m − Q_i·m²` turns.

**Doppler.** `radar_doppler` writes bins into a ping-pong corner-turn memory indexed by
`[bin][chirp]`. For every bin it runs a 64-point slow-time transform over the frame's 50
chirps, zero-padded.

The deramp conjugates the echo, so this transform is the FFT core in inverse mode. Bin `k`
then holds a target whose phase advances by `+k/64` turn per chirp. `overrun` flags a frame
that arrives before the previous map is finished.

## Communication receiver (`comm_rx` and its parts)

One `comm_rx` per polarisation. After reset it generates the reference pilot, transforms it
and stores its spectrum; `ready` then rises. On `capture` it processes one frame:

1. **Record** (`frame_buffer`). `NCH·NS + WIN` samples go into a frame memory, so the
   receiver works on a stored frame.
2. **Time sync** (`time_sync`). The receiver correlates the local pilot with the recording
   at each of the first `WIN` = 64 lags, over the full pilot length. It keeps the lag with
   the largest `|C|²`. This takes `WIN·NS + 3` clocks.
3. **FFT.** Chirp `i` is read from `lag + i·NS`, zero-padded to 1024 points and transformed
   by `fft_core`.
4. **Channel estimation and equalisation** (`chan_est_eq`). The pilot spectrum gives an
   element-wise LMMSE estimate, `h = y_p·conj(u_p)/(|u_p|² + σ²)`. Each data spectrum is then
   equalised with `conj(h)·y/(|h|² + σ²)`. The two σ² (noise plus cross-polarisation
   interference) are run-time inputs.
5. **IM decision** (`im_ml_est`). This step takes three passes over the spectrum:
   - **Capture.** Store the bin magnitudes, approximated as max + min/2.
   - **Smooth.** Take a 16-bin moving sum, record its peak and zero every bin below 1/4 of
     the peak.
   - **Band sums.** For every codebook entry, sum the result over the entry's band. This
     gives `S_c` over `W_c` bins.

   The decision is the entry with the largest `S_c²/W_c`. This is the correlation with a
   flat template of unit energy over the band, which is what a chirp's spectrum nearly is.
   The comparison is made by cross-multiplication, one entry per clock.
   - A band that is too narrow loses energy.
   - A band that is too wide pays through `W_c`.
6. **IFFT and PM decision** (`pc_demod`). The equalised spectrum is transformed back to time.
   `pc_demod` then rebuilds the unmodulated chirp of the decided `(b, f)` with the
   transmitter's oscillator recurrence and de-chirps with it. It sums each segment and picks
   the PSK point nearest to the sum's angle.
7. **Decode** (`codebook_decoder`). This rebuilds the 25-bit word. `out_err` flags an IM
   index outside the codebook.

Each data chirp produces one `out_valid` pulse, and `frame_done` follows the last chirp. One
FFT core serves the pilot and the data chirps, and a second core does the IFFT. Processing is
one chirp at a time and slower than real time: about `2·1024·7` clocks per chirp. This suits
a receiver that records and then decodes.

## FFT core (`fft_core`)

The core is a radix-2, decimation-in-time, in-place FFT with one butterfly per clock and
24-bit data. Twiddles are 15-bit and come from a table computed at elaboration. Every stage
can halve its output (`scale` bits), and products and halvings round to nearest.

- **Input:** N samples in natural order.
- **Output:** natural order, with a bin index, advanced by `out_en`.
- **Latency:** `(N/2)·log2 N + 2` clocks after the last input.
- **Inverse:** `inverse` conjugates the twiddles.

## Departures from the described system

- **Sign of the deramp.** The mixer conjugates the transmitted chirp, `x·conj(r)`, because
  these chirps have phase `+θ`. For the same reason the Doppler transform uses the inverse
  FFT.
- **Extra phase-correction term.** The correction holds an extra `−Δb·τ/2` in its linear
  term. A chirp here starts at `f − b/2`, so changing the bandwidth also moves the start
  frequency. Without the term, the Doppler phase of a target would still depend on the data.
- **Flat band templates.** The IM decision correlates with flat band templates instead of
  stored spectra of every codebook chirp. Smoothing width, threshold and the magnitude
  approximation are own choices.
- **PM decision metric.** As printed, the metric, `|x·conj(x_m)|²`, is the same for every
  candidate phase. The decision here takes the candidate of maximum real correlation, which
  is what a best match means.
- **Smoothing window.** Phase smoothing uses a binomial window in place of a Gaussian of
  unspecified width.
- **Pilot.** The pilot is 60 MHz wide, centred at 0 Hz, so that it covers every codebook
  chirp for channel estimation.
- **Storage and noise power.** The frame is kept in on-chip memory rather than in files
  processed by software. The noise-plus-interference power is an input rather than an
  estimate.
- **Out of scope.** No carrier-frequency offset or Doppler correction is done in the
  communication receiver. No target detection is done on the range-Doppler map.
- **24 GHz configuration.** The 150–250 MHz chirps of the 24 GHz configuration need a sample
  rate above 250 MS/s. The default 100 MS/s does not hold them.
- **Other chirp lengths.** Longer chirps (50 or 100 µs) and more segments (L = 50 or 100)
  are parameter changes. They need `NS` of 5000 or 10000 and a larger FFT.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values are computed in the
testbench with real arithmetic.

Example with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/isac_pkg.sv tb/tb_fft_core.sv \
          --top-module tb_fft_core -Wno-fatal
./obj_dir/Vtb_fft_core
```

The end-to-end testbench drives `isac_top` with its own transmitted frames through a simple
channel model:

- 13-sample communication delay;
- a radar target 10 samples away with a Doppler phase step;
- −18 dB cross-polarisation leakage;
- complex per-polarisation gains;
- uniform noise.

It checks three results:

- the sync lag;
- the range-Doppler peak of both polarisations over two frames;
- every decoded data word, IM and PM bits counted separately.

It also makes a data stall happen, and a sensing-only frame.

- **`tb_isac_top`** runs this at 8 chirps per frame.
- **`tb_isac_top_full`** runs it with every default (50 chirps, 1000 samples, 1024-point
  FFT). It takes a few seconds of simulation.

`tb_comm_rx` runs one transmitter into one communication receiver over a channel with a
random delay and complex gain. It checks the sync lag and every decoded word over two frames.

`tb/tb_common.svh` holds the shared clock, reset, check counter and watchdog.
