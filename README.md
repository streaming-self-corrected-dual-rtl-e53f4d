# Streaming self-correction for a free-running dual-comb spectrometer

Two frequency combs with slightly different repetition rates, beating on one photodiode,
produce a train of short interferograms: one every 1/Δf_rep (50 µs at a 20 kHz detuning).
Averaging many of them would raise the signal-to-noise ratio. But with free-running combs,
consecutive interferograms do not line up. Each one arrives a little early or late, because
the repetition rates drift. Each one also carries a different carrier phase, because the
carrier-envelope offset frequencies drift. Averaged naively, they cancel instead of adding.

This design fixes every interferogram in the FPGA fabric, as the data streams past. It does
not measure the combs themselves. Instead, it reads the needed quantities off the
interferograms.

1. For each interferogram it measures three things:
   - the exact arrival time, from the first moment of the magnitude;
   - the carrier frequency, from an FFT;
   - the carrier phase at the arrival time.
2. It holds the raw stream back until the *next* interferogram has been measured.
3. It resamples the held-back stream onto a time grid that puts every interferogram at the
   same position. While doing so it rotates each sample by a phase interpolated linearly
   between the phases of the two neighbouring interferograms.
4. The corrected records all look the same, so they can be summed in on-chip memory for as
   long as wanted. The sum, and the per-interferogram measurements, go to the host.

Everything runs concurrently at one complex sample per 307.2 MHz fabric clock. No stage ever
waits for a whole data set.

## Signal flow

```
 16 x 14-bit ADC samples / clock (4.9152 GSa/s)
        |
   nco_mixer        real x cos(NCO): move the band of interest down
        |
   decimator        mean of 8 -> 2 real samples / clock (614.4 MSa/s)
        |
   hilbert_mixer    51-tap Hilbert FIR -> analytic signal, shift by fs/4, keep every 2nd
        |           -> 1 complex sample / clock (307.2 MSa/s)
        +-------------------------+----------------------+
        |                         |                      |
   sample_fifo (125 us)     ring_buffer (4 us)      ifg_trigger
        |                         |                      | trig, t_approx
        |                         +----> ifg_analysis <--+
        |                                    |  t_center, dt_center, f_bin, phi, dphi
        |        +---------------------------+----------------> meas (to host)
        v        v
   phase_resampler       grid + interpolation + rotation by -phi
        |
        +--> corr (corrected stream, rec_len samples per interferogram)
        |
   coherent_averager     n_avg records summed in place -> avg_* (to host)
```

`dcs_top` wires these blocks together. The converter, the DMA engines and the host processor
are outside the design:

- the converter's 16 samples per clock come in on `adc_data`;
- the host's settings are plain input ports;
- the two streams that would go to DMA leave as output ports: the averaged records `avg_*`
  and the measurements `meas`/`meas_valid`.

## Front end: from 16 real samples to one complex sample per clock

`nco_mixer` keeps a 32-bit phase accumulator that advances by 16 × `nco_freq` every clock.
Lane k uses phase `acc + k·nco_freq`. Each lane multiplies its sample by a cosine taken from a
1024-entry table, which is computed at elaboration: cos(2πi/1024) in Q1.15. There are 16
parallel multiplies and one clock of latency.

`decimator` averages each group of 8 lanes (sum, then an arithmetic shift by 3). This low-pass
filters and decimates in one step, and leaves 2 real samples per clock.

`hilbert_mixer` turns the 614.4 MSa/s real stream into a complex one at half the rate:

- Q is the 51-tap Hilbert FIR. Its coefficients are h[n] = 2/(πn) for odd n and 0 for even n,
  Hamming-windowed, in Q1.15, and computed at elaboration. Only the 26 non-zero (odd) taps multiply.
- I is the same stream delayed to the filter's centre tap (25 samples).
- The analytic signal is then shifted by fs/4 = 153.6 MHz and every second sample is dropped.
  At the kept samples this is just a multiply by (−1)^m, so the block flips the sign of I and Q
  on alternate clocks.
- `dout_valid` rises once the history is full.

A signal at RF frequency f (after the NCO) comes out at f − 153.6 MHz. The usable band is the
full 307 MHz of the complex stream.

## Measuring each interferogram

This is the core of the design and the part with the tightest timing.

**Trigger.** `ifg_trigger` compares |I|+|Q| with `trig_threshold` on every sample. |I|+|Q| is
a cheap stand-in for |x|. The first sample that reaches the threshold fires `trig` and reports
`t_approx`, its index on a free-running 32-bit sample counter. The trigger then ignores the
input for `trig_holdoff` samples, so the rest of the same burst cannot fire it again. Set the
hold-off to about half the interferogram period.

**Look-back.** The trigger fires on the leading edge of a burst, but the analysis wants the
burst centred in its window: 4 µs before and 4 µs after the trigger. The samples before the
trigger have already gone by. `ring_buffer` therefore delays a copy of the stream by
`RING_DEPTH` = 1229 samples (4 µs). It is a delay line, not an addressable buffer: each
incoming sample reads out the entry it overwrites.

**Window.** `ifg_analysis` counts the delayed samples on the same time base as the trigger. On
a trigger it waits for delayed sample `t_approx − PRE` (PRE = 1225). It then takes
WIN = 2458 consecutive samples, one per clock. PRE is 4 samples short of the ring depth, so the
start of the window is always still in the future when the trigger arrives. Three things are
computed from the same window:

1. *Arrival time.* A vectoring CORDIC (16 iterations) forms |x| for every sample. Two
   accumulators build S0 = Σ|x| and S1 = Σ i·|x|, where i is the position in the window. A
   bit-serial restoring divider then forms S1/S0 with 8 fractional bits. The divider takes one
   clock per quotient bit, which fits easily inside the time the FFT needs. The result is
   `t_center` = window start + S1/S0, in samples, with 1/256-sample resolution. If the window
   is empty (S0 = 0), the centre of the window is used.
2. *Frequency.* The central 2048 samples of the window (offset FOFF = 205) feed `fft_r2sdf`,
   a streaming radix-2 single-path delay-feedback FFT (11 stages). Each stage halves its
   output, so the transform is scaled by 1/N and cannot overflow. As the bins leave in
   bit-reversed order, the bin with the largest |X|² is kept. `f_bin` is its signed index,
   with bins ≥ N/2 taken as negative. One bin is 307.2 MHz / 2048 = 150 kHz. For a carrier
   above the NCO frequency, the RF carrier frequency is NCO frequency + 153.6 MHz +
   f_bin × 150 kHz. No interpolation between bins is
   done.
3. *Phase.* A second CORDIC takes arg X[k] of the peak bin. That is the carrier phase at the
   start of the FFT frame, so the design adds the ramp that the burst's position in the frame
   puts on the bin: φ = arg X[k] + k·(t_rel − FOFF)/N turns, where t_rel is the window-relative
   arrival time. The result `phi` is the carrier phase at the arrival time. This is the quantity
   that has to be continuous from one interferogram to the next.

Phases are 16-bit numbers in turns, with one turn = 2¹⁶. Wrapping modulo 2π is therefore free:
`dphi = phi − previous phi` is automatically the shortest phase step, within ±½ turn.
`dt_center = t_center − previous t_center` is the measured interferogram period. It carries
the repetition-rate fluctuation, and `dphi` carries the offset-frequency fluctuation.
Converting them to Hz needs f_rep and the optical set-up, which is left to software.

**Latency.** The window has fully arrived about 2462 clocks after the trigger: the 4 µs after
the trigger, plus the small ring-depth slack. The FFT's last bin leaves 2N − 1 + 11 clocks
after its first input. The phase CORDIC and the output register add 20 clocks. From trigger to
`meas_valid` this comes to **4335 clocks = 14.1 µs**, inside a 15 µs budget. The full-size
testbench checks that every result arrives within 4608 clocks (15 µs). A trigger that arrives
while an analysis is still running is ignored. At the defaults this limits the interferogram
rate to one per 4335 clocks, i.e. about 70 kHz.

## Waiting for the next interferogram: the 125 µs FIFO

The correction of the samples around interferogram n needs the arrival times and phases of
n−1, n and n+1. Interferogram n+1 is measured only about one period plus 14 µs later. Until
then the raw stream waits in `sample_fifo`, which holds 38400 complex samples (125 µs).

The FIFO is first-word-fall-through: the head sample is always on `dout` when `dout_valid` is
high. It reads synchronously into an output register, so the memory maps to block RAM.

It has one unusual operation, **skip**. It discards `skip_n` samples in a single clock by
moving the read pointer. Without it, a reader that has fallen behind could never catch up: the
FIFO fills at one sample per clock and the reader drains at no more than one per clock. A push
into a full FIFO is dropped and reported on `overflow`. Assertions check that `pop` only comes
with a valid head, and that a skip never exceeds the fill level.

Needed depth at 20 kHz: a record starts half a period before its interferogram. It can be
finished only after the next interferogram has been analysed, so the oldest needed sample
waits about 0.5 P + P + 4335 = 27375 samples (28527 at a 5 % slower detuning). This is less
than 38400.

## Resampling and phase correction

`phase_resampler` is the hardest block to follow. Its job is to make every interferogram
period contain the same number of output samples, `rec_len`, with interferogram n at the same
index of every record and with the same phase.

**The grid.** Between two consecutive arrival times t_n and t_n+1, it lays exactly `rec_len`
grid points:

    t_j   = t_n + j · (t_n+1 − t_n) / rec_len,            j = 0 .. rec_len−1
    phi_j = phi_n + j · dphi_n+1 / rec_len

Each output is the stream interpolated linearly at t_j, multiplied by exp(−i·2π·phi_j). The
phase correction therefore interpolates linearly between the measured phases of the two
adjacent interferograms. The time grid stretches or shrinks each period to a fixed count.
Sub-sample jitter of the arrival times disappears along with the rate fluctuation.

**Records.** Output records are cut at the midpoints between interferograms. Record n is the
last `rec_len/2` points of segment (n−1, n), followed by the first `rec_len − rec_len/2`
points of segment (n, n+1). So every record depends on the last, the current and the next
arrival times, and its interferogram sits at index `rec_len/2`. `dout_first` marks the first
sample of each record.

**Why 95 %.** The block emits at most one sample per clock, and the stream arrives at one per
clock. If the grid had as many points per period as the stream has samples, any increase in
detuning (a shorter period) would demand more than one output per clock. The host therefore
sets `rec_len` to about 95 % of the nominal period: 14592 = 0.95 × 15360 at 20 kHz. The grid
step is then ≥ 1 sample, even when the period shrinks by up to 5 %.

**Mechanics.**

- *Segment queue.* Each analysis result closes a segment (previous result, this result). The
  segment goes into a two-entry queue. Two bit-serial dividers work out its steps: the time
  step with 24 fractional bits and the phase step with 16 fractional bits. They finish long
  before the FIFO has delivered the samples the segment needs.
- *Sample pair.* The block holds the two stream samples b and b+1 in registers. b counts the
  samples taken out of the FIFO since reset, which is the same time base as the trigger and
  the analysis. Each clock:
  - if the current grid point's integer part equals b, it emits that point;
  - if the next grid point lies beyond b, it advances the pair (pops the FIFO).

  The fractional part of t_j (16 bits) weights the two samples. A CORDIC rotator (16
  iterations, gain-corrected) applies −phi_j.
- *Idle.* With no segment pending, the block skips samples older than the start of the next
  segment, all in one clock. Before the very first result it keeps only the newest KEEP = 19200
  samples.
- *Lost interferograms.* If interferograms stop arriving, for example because the light was
  blocked or the trigger level is wrong, the FIFO fills with no segment to use it. At
  `FIFO_DEPTH − 2` the block throws away all but KEEP samples and clears its queue. It pulses
  `drop` and starts over with the next two results.
- *Late.* `late` pulses if a grid point is requested after its samples have already left. This
  does not happen while the settings are consistent. It is exported so the host can see a
  wrong `rec_len`.

Latency from the FIFO pair to `dout` is 19 clocks. A corrected sample leaves roughly one
interferogram period plus 14 µs after it arrived.

## Coherent averaging

After correction all records have the same length and phase, so averaging is a plain
sample-by-sample sum. `coherent_averager` holds one 2 × 40-bit accumulator per record position,
with up to 16384 positions in block RAM. It works in passes:

- It locks onto the first `dout_first`.
- Pass 0 of each average *writes* the samples. The memory never needs clearing, and a new
  average starts straight after the previous one, with no gap.
- Passes 1 … n_avg−1 read, add and write back one sample per clock.
- During the last pass the completed sums stream out on `avg_re/avg_im/avg_valid`.
  `avg_last` marks the final position and `avg_count` counts finished averages.

The output is the sum, not the mean; the host divides by `n_avg`. With 40-bit accumulators,
2²⁴ (16.8 million) full-scale records can be added without overflow. That is about 14 minutes
at 20 kHz in a single average. Longer integrations add successive averages in software.

## Number formats

| quantity | format |
|---|---|
| converter sample | signed 14 bit |
| mixed / decimated real sample | signed 16 bit |
| complex sample `cplx_t` | signed 16 + 16 bit |
| times `t_center`, `dt_center` | unsigned 32.8 fixed point, unit = one complex sample (3.255 ns) |
| `phi`, `dphi` | signed 16 bit, unit = 2⁻¹⁶ turn |
| `f_bin` | signed 16 bit bin index, 150 kHz per bin |
| FFT datapath | 24 bit, twiddles Q2.16 (18 bit) |
| grid time | 24 fractional bits; interpolation weight 16 bit |
| accumulator | signed 40 bit per component |

The shared types and widths are in `dcs_pkg`.

## Using the top level

Settings, all plain inputs to `dcs_top`, held stable during operation:

| port | meaning | example (20 kHz detuning, band at 1 GHz) |
|---|---|---|
| `nco_freq` | NCO step per converter sample, turns × 2³² | 0.85 GHz / 4.9152 GHz × 2³² |
| `trig_threshold` | level of \|I\|+\|Q\| that marks an interferogram | well above the noise, below the burst peak |
| `trig_holdoff` | samples ignored after a trigger | ≈ half a period (7680) |
| `rec_len` | output samples per interferogram | 0.95 × 307.2 MHz / Δf_rep = 14592 |
| `n_avg` | records per average | 1 … 2²⁴ |

Outputs:

- `corr`, `corr_valid`, `corr_first`: the corrected stream.
- `avg_*`: the averaged records.
- `meas`, `meas_valid`: one `ifg_result_t` per interferogram.
- Status: `trig`, `fifo_count`, `fifo_overflow`, `resync_drop`, `grid_late`.

Synchronous active-high reset. All blocks use one clock.

Sizes at the defaults (from synthesis without a vendor library):

- about 3.0 Mbit of memory:
  - FIFO 1.23 Mbit;
  - averager 1.31 Mbit;
  - NCO cosine tables 0.26 Mbit, 16 copies;
  - FFT delay lines 0.17 Mbit;
  - ring buffer 0.04 Mbit;
- 2.9 k flip-flops outside the memories.

## What the default sizes can run

| run | needed | built | fits |
|---|---|---|---|
| 20 kHz detuning, 95 % output rate | record 14592, FIFO 27375–28527 | 16384, 38400 | yes |
| 20,000-record average (iodine, 1 s) | 20,000 × 2¹⁵ ≈ 6.6·10⁸ | 2³⁹ ≈ 5.5·10¹¹ | yes |
| 1,000,000-record average (acetylene, 50 s) | 3.3·10¹⁰ | 5.5·10¹¹ | yes |
| > 2 million records (100 s) | 6.6·10¹⁰ | 5.5·10¹¹ | yes |
| 1000 unaveraged interferograms (50 ms) | continuous corrected stream | `corr` port | yes |
| single spectra at 65 kHz | period 4726 ≥ analysis time 4335 | | yes |

Below a detuning of about 17.8 kHz, a record of 0.95 × period no longer fits the 16384-entry
averager. The FIFO sets a lower limit of about 13.5 kHz. Raise `AVG_DEPTH` and `FIFO_DEPTH`
for slower detunings.

## Where this design makes its own choices

The published description gives the sequence of steps, the rates, the buffer lengths (4 µs
and 125 µs), the filter order, and the measurement methods (first moment for time, FFT for
frequency). It also gives the linear phase interpolation, the three-interferogram grid, and
the 95 % output rate. Everything below is this design's own:

- **Mixer in fabric.** The NCO mixer is written in fabric logic. On the original platform it
  may sit in the converter tile. The 1024-entry cosine table limits the mixer's spurs to about
  −60 dBc.
- **Hilbert filter.** "51st order" is read as 51 taps, which gives an integer centre delay for
  the I path. The Hamming window is this design's choice.
- **Trigger.** It uses a threshold on |I|+|Q| with a hold-off counter.
- **Window placement.** PRE is 4 samples short of the ring depth, to leave margin.
- **FFT.** 2048 points, no window function, peak bin without interpolation. Frequency is
  therefore reported to ±75 kHz. It only selects the bin whose phase is used; it is not used in
  the correction.
- **Phase reference.** The phase is referred to the arrival time through the window-position
  ramp.
- **Records, recovery and output.** The cut at the midpoints, the skip/drop recovery policy and
  all fixed-point formats are this design's. So is the unnormalised sum at the averager output.
- **Outside the design.** The converter, the DMA engines and the processing system are not
  part of the RTL. Their interfaces are plain ports.

**Known limitation: first moment over a wide window.** The arrival time is the first moment of
|x| over the whole 8 µs window. The noise floor adds a term to S1/S0 that pulls the estimate
towards the window centre. The pull grows with the floor's share of S0 and with the distance
between the burst and the window centre. That distance changes from one interferogram to the
next with the trigger position. In simulation with a weak burst (Gaussian, σ = 20 samples,
peak ≈ 6000 converter LSB before mixing), uniform converter noise of ±2 LSB was enough to move
the arrival time by 0.3 to 0.7 samples. The same run without noise stays within 0.3 samples.
Strong interferograms reduce the effect. Subtracting the floor, or narrowing the moment window
around the peak, would remove it; neither is done here.

## Verification

Each block has a self-checking testbench in `tb/`, and each compares against a model computed
independently in the testbench:

| testbench | what it checks |
|---|---|
| `tb_nco_mixer` | all 16 lanes against a real-valued NCO model, random samples, two frequency words |
| `tb_decimator` | floor of the mean of 8, one clock after the inputs |
| `tb_hilbert_mixer` | real tones at 0.30 and 0.20 of the input rate come out as constant-magnitude phasors turning by +0.10 and −0.10 turn per sample |
| `tb_ifg_trigger` | trigger index, hold-off, re-arming, gaps in the valid signal |
| `tb_ring_buffer` | every output is the sample that entered exactly DEPTH valid samples earlier, and leaves the clock after it; two depths, random input gaps |
| `tb_sample_fifo` | random push/pop/skip against a queue model, overflow, fall-through |
| `tb_fft_r2sdf` | 64-point transform against a direct DFT, and its latency N−1+log2 N |
| `tb_ifg_analysis` | synthetic bursts with known centre, frequency and phase: t_center within 0.15 sample, exact bin, phase within 0.01 turn, differences, latency |
| `tb_phase_resampler` | every grid point of a known rotating stream against the interpolated, rotated model value (8 LSB), record starts, ±5 % period changes, drop and resynchronisation |
| `tb_coherent_averager` | exact sums for n_avg = 3 and 1 with random input gaps, `dout_last`, `n_done` |
| `tb_coherent_averager_long` | averages of 2,100,000, 1,000,000 and 20,000 two-sample records of full-scale values, back to back: exact 40-bit sums |
| `tb_dcs_top` | the whole chain at reduced sizes (see below) |
| `tb_dcs_top_full` | the whole chain with every parameter at its default, 20 kHz detuning with periods varying by ±4.6 % |
| `tb_dcs_top_65khz` | the defaults at the highest interferogram rate, 65 kHz, where the period is only ~390 clocks longer than one analysis |

The end-to-end benches share `dcs_bench`. It synthesises converter samples:

- a train of Gaussian bursts on a 1 GHz carrier;
- periods jittered by ±2 samples (or more, see below) plus a random fraction;
- carrier phases that slip by up to ±0.35 turn between interferograms;
- a run of missing interferograms longer than the FIFO, which forces a resynchronisation.

It checks:

- the measured arrival times and periods against the true ones, within 0.3 sample;
- that every interferogram present is analysed, within the latency limit;
- that consecutive corrected records match sample by sample within 6 % of their peak, by default (without
  correction the phase slips would make them disagree completely);
- that the peak sits at `rec_len/2`;
- that every average equals the sum of its records, exactly.

It also counts each mechanism: triggers, analyses, records, average dumps, FIFO skips,
resynchronisation drops and late grid points. A mechanism that never occurs counts as a
failure.

- `tb_dcs_top` runs at reduced sizes: 64-sample ring, 128-point FFT, 1024-entry FIFO, periods
  of 400 samples.
- `tb_dcs_top_full` runs the defaults: 15360 ± 700-sample periods, `rec_len` 14592 and a
  15 µs latency limit. The bursts keep their width while the grid step follows the period, so
  neighbouring records differ in shape by up to ~9 %. The record comparison therefore allows
  15 % there; an uncorrected phase slip would give over 100 %. It uses a noise-free stimulus
  because of the limitation above.
- `tb_dcs_top_65khz` runs the defaults at 4726-sample periods, `rec_len` 4490 and averages of
  4. It checks that no interferogram goes unanalysed.

Every testbench ends with a `TB_RESULT checks=… failures=…` line and has a watchdog.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/dcs_pkg.sv tb/tb_dcs_top_full.sv \
          --top-module tb_dcs_top_full -o sim && ./obj_dir/sim
```

For any other block, replace the testbench name. The full-size run builds in under a minute
and simulates in about a second.

## Files

`rtl/`:

- `dcs_pkg.sv`: types and widths;
- the pipeline blocks named above;
- helpers:
  - `fft_sdf_stage.sv`: one FFT stage;
  - `cordic_vector.sv`: magnitude and angle;
  - `cordic_rotate.sv`: rotation by an angle;
  - `seq_divider.sv`: bit-serial unsigned divider.

`tb/`: one testbench per block, plus `dcs_bench.sv` (shared end-to-end stimulus and checks).
