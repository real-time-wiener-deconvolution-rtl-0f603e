# Real-time Wiener deconvolution of PMT waveforms: TQ reconstruction RTL

A large photomultiplier (PMT) answers a single photoelectron with a negative
pulse about 40 ns wide. When two photoelectrons arrive closer than that, a
plain over-threshold integrator ("charge over threshold") sees one long pulse
and reports one hit carrying twice the charge. This design separates such hits
in real time. It runs inside the readout FPGA, on the 1 GS/s flash-ADC stream,
and uses two short FIR filters. A Wiener filter removes noise. A deconvolution
filter (a differentiator) then turns each photoelectron into a narrow spike.
A peak finder picks out the spikes and writes one 128-bit time/charge ("TQ")
packet per spike.

The RTL follows the architecture of the JUNO readout-board implementation in
*Real-Time Wiener Deconvolution for feature reconstruction in JUNO*
(Lastrucci et al.): the entity `TQ_reco` with `baseline_finder`,
`over_check`, `filter_wrapper`, `peak_finder`, sync shift registers and the
packing logic. That paper describes its blocks in prose and one block diagram.
Widths, latencies, the packet layout, FIFO depths and the default filter taps
are not given there, so they are choices made here. Each is listed under
"Own choices" below.

## Data format and throughput

* One instance of `tq_reco` handles one ADC stream. The stream carries 14-bit
  samples in 16-bit words, eight per 125 MHz clock: one 128-bit frame per
  clock. Sample 0 sits in bits [15:0] and is the earliest in time.
* The stream must be continuous, with `adc_valid` high on every clock. Control
  flags, the baseline and the time stamps are lined up with the data by
  counting clocks.
* `time_cnt` is the board's coarse time counter. It advances by one per clock
  and labels the frame that is on `adc_raw_data` in that clock. Packet times are
  given in samples (1 ns).
* The output is at most one TQ packet per frame (8 ns), held in a 512-deep
  FIFO until the readout collects it through `tq_rd_en` / `tq_fifo_out`.

## Pipeline

```
adc_raw_data ─┬─> baseline_finder ── baseline ─┬──────────────> sr_baseline (9) ──┐
              │                                 v                                  v
              └───────────────────────> over_check ── hit/stop ─> sr_hit/sr_stop (5) ─> peak_finder ─> tq_packer ─> sync_fifo ─> tq_fifo_out
                                             │                                      ^       ^
                                             └─ adc_check ─> filter_wrapper ─ adc_filt ─┘   time_cnt
                                                            (Wiener 11 taps -> deconv 7 taps)
```

| stage | module | latency (clocks) |
|---|---|---|
| threshold, baseline subtraction | `over_check` | 1 |
| Wiener FIR + deconvolution FIR | `filter_wrapper` (2 x `fir_parallel`) | 4 |
| peak search | `peak_finder` | 4 |
| packing | `tq_packer` | 1 |
| FIFO write | `sync_fifo` | 1 |

`tq_pkg` defines these latencies. With them, a packet can be read from the
output FIFO 11 clocks after the raw frame holding its spike entered the input.

### Baseline (`baseline_finder`)

The ADC output sits on an offset of several thousand counts, and the offset
drifts. For every frame the block forms the mean `<a>` of the eight samples.
It then acts as follows:

* On the first frame, and again every 1000 samples (125 frames), it re-seeds:
  `b = <a>`. A bad start, for example one that lands on a pulse, therefore
  cannot last.
* If `|<a> - b| <= baseline_d`, it follows the drift with `b = (b + <a>) / 2`.
  `baseline_d` defaults to 3 counts, about the noise level of the channel.
* Otherwise the frame is taken to hold a pulse, and `b` keeps its value.

Both means round down. The baseline that `over_check` applies to a frame is
computed from the earlier frames only.

### Threshold and trigger regions (`over_check`)

A sample is over threshold when it is below `baseline - thrd_value_rel` (the
pulses are negative). For every frame the block produces:

* the 8-bit mask `overthrd` and the trigger primitive `trigger`, which is the
  OR of the mask;
* `adc_check = baseline - sample`, saturated to 16 bits. The baseline is
  removed and the polarity inverted, so pulses are positive;
* `hit` and `stop` from a two-state FSM (IDLE, CHARGE). `hit` marks the first
  frame with any sample over threshold. `stop` marks the first frame after it
  with none. The frames from `hit` to `stop` form a *trigger region*.

### Filters (`filter_wrapper`, `fir_parallel`, `fir_config_ctrl`)

At 1 GS/s and eight samples per clock, each output sample needs its own
multipliers. `fir_parallel` therefore computes all eight outputs of a frame in
parallel. It keeps the last N-1 input samples, so the filter runs on across
frame borders:

```
y[n] = sat16( (sum_k coef[k] * x[n-k]) >>> SHIFT )
```

The shift and the saturation are the "bit resizing": they bring each
filter's output back to 16-bit samples.

* **Wiener filter**: 11 taps, symmetric (linear-phase Type I). It smooths
  away noise but keeps the pulse shape. The default taps
  `0 2 8 17 24 26 24 17 8 2 0` sum to 128 and `SHIFT = 7`, so the DC gain
  is 1.
* **Deconvolution filter**: 7 taps, antisymmetric with a zero centre tap
  (Type III), i.e. a differentiator. It gives a narrow positive spike on each
  rising edge, and the spike height measures the charge. Default taps
  `4 2 1 0 -1 -2 -4` with `SHIFT = 2`.

In the original system the taps are fitted offline for each setup, from the
measured single-photoelectron template and noise spectrum: a least-squares fit
of `W = SNR / (SNR + 1)` for the Wiener filter, and a Remez fit of `1 / H` for
the deconvolution filter. They are then loaded at every start-up. **The
default taps here are placeholders.** They have the right length and
symmetry, but they are not fitted to any PMT. Load real taps before trusting
the charges.

The two filters together delay the signal by (11-1)/2 + (7-1)/2 = 8 samples,
one frame (`GROUP_DELAY`).

**Reloading taps.** Write the N tap words (tap 0 first) with `cfg_wr_en` /
`cfg_wr_data` into the 32-word configuration FIFO, then pulse `cfg_start`,
with `cfg_sel` naming the filter (`SEL_WIENER` or `SEL_DECONV`). The FSM then
runs through three states:

1. **IDLE**: checks that the FIFO holds at least N words. If it does not, it
   sets the sticky `cfg_error` and loads nothing.
2. **LOAD**: pops one word per clock into a shadow tap set.
3. **CONFIG**: copies the shadow set into the live taps in a single clock and
   pulses `cfg_reload_done`.

The filters keep running throughout and never see a half-loaded tap set. A
reload takes N + 2 clocks. The first raw frame filtered with new deconvolution
taps is the one that entered the input 3 clocks before `cfg_reload_done` went
high.

### Peak finding (`peak_finder`)

The search runs only inside a trigger region. It also covers the frame just
before the hit frame, because the deconvolution spike sits on the rising edge
and can come before the first over-threshold sample. A sample is a peak when
the `peak_win` samples before it strictly rise towards it and the `peak_win`
samples after it strictly fall. It is then the largest sample of a
`2*peak_win + 1` window, and has a single hump. `peak_win` can be set from 1
to 8.

To look `peak_win` samples past the end of a frame, the block keeps two frames
in a buffer and tests the middle one. Three register stages follow:
neighbour comparisons, then the per-lane AND over the window, then the
selection. If more than one lane of a frame qualifies, the largest is reported
and the packet's `multi` flag is set. The outputs are `charge` (the spike
height) and `hit_time` (lane 0..7).

### Alignment: the part to read twice

Three things must line up with the filtered stream: the flags, the baseline
and the time stamp.

* `hit` / `stop` leave `over_check` together with the raw-aligned
  `adc_check`. The filtered samples arrive 4 clocks later. They also carry the
  signal one frame late (the group delay). `sr_hit` / `sr_stop` therefore
  delay the flags by 4 + 1 = 5 clocks. A hit seen in raw frame *f* then opens
  the search at filtered frame *f+1*.
* The baseline reported with a hit is the one that applied to the raw frame
  with the same sample index as the spike. `sr_baseline` delays it by the 9
  clocks from the input to the peak result.
* The packer computes the time stamp in the clock when the peak result
  appears:

  ```
  hit_time_ns = 8 * (time_cnt - 9) + lane - 8
  ```

  `time_cnt - 9` is the counter value of the raw frame with the same sample
  index as the spike. `- 8` takes away the group delay of the filters.

If a pipeline stage is added or removed, change the latency constants in
`tq_pkg`. The shift registers and the time formula are derived from them.

### TQ packet (`tq_packet_t`, 128 bits)

| bits | field | meaning |
|---|---|---|
| 127:120 | `channel` | `channel_id` input |
| 119:112 | `flags` | bit 0: another peak in the same frame was dropped |
| 111:64 | `hit_time` | absolute hit time in ns (see above) |
| 63:48 | `charge` | deconvolved spike height (signed) |
| 47:32 | `baseline` | baseline in ADC counts at the hit |
| 31:16 | `seq` | running packet number; a gap means packets were lost |
| 15:0 | `reserved` | zero |

When the output FIFO is full, a packet is dropped and `tq_overflow` counts
it. `tq_packets` counts the packets written.

## Own choices and departures from the published design

* **Filters.** The original builds them as parallel systolic filters with the
  vendor FIR generator. Here each filter is plain direct-form RTL: 8 x N multipliers, with no folding of symmetric taps,
  so any tap set can be loaded. That costs 8 x (11 + 7) = 144 multipliers per
  stream. The published board carries six flash ADCs (three PMTs, two gains)
  on one Kintex-7 with 840 DSP slices, and the reconstruction uses 624 of
  them. Six unfolded streams would need 864, which does not fit. Folding the
  symmetric Wiener taps gives 8 x (6 + 7) = 104 per stream and exactly 624 for
  six, so the original probably folds them. That is an inference; the number
  of streams and the folding are not stated.
* **Default taps and shifts.** The taps in `tq_pkg` and the shifts 7 and 2
  are placeholders (see above). The published filters were fitted to measured
  data, and their tap values are not printed.
* **Interfaces and formats.** The packet layout, the 48-bit `time_cnt`, the
  reload command (`cfg_start` / `cfg_sel`, tap order, error flag) and the
  FIFO depths (512 x 128 output, 32 x 16 configuration) are this design's.
* **Behaviour details.**
  - The peak search starts one frame early.
  - At most one peak is reported per frame, with the `multi` flag.
  - `peak_win` is limited to 1..8.
  - There is no minimum-charge cut.
  - The baseline means round down, and the baseline window is inclusive.
  - The threshold comparison is strict.
  - `hit` and `stop` work on whole frames.
  - All flags stay low until the first baseline exists.
* **Reset and stream.** Reset is synchronous and active low. The stream is
  assumed continuous (see "Data format").
* **Outside this RTL.** Charge calibration (the ~5 % bias and the undershoot
  correction) is done offline and is not built. So are the flash ADCs and
  SERDES, the IPbus slow control, the central trigger unit and the DAQ link.
  They connect at the ports of `tq_reco`.

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block
against a reference written independently from the rules above, and stops on
a watchdog.

| testbench | what it covers |
|---|---|
| `tb_baseline_finder` | 3000 frames with drift, noise, pulses and idle clocks; re-seed count |
| `tb_over_check` | mask, trigger, subtraction with saturation, hit/stop on random pulses |
| `tb_fir_parallel` | 11- and 7-tap instances against a direct convolution; impulse response; saturation; latency 2 |
| `tb_fir_config_ctrl` | default taps, refused reload, both reloads, old taps kept until the swap, N + 2 clocks |
| `tb_filter_wrapper` | cascade against two reference convolutions, with a deconvolution reload mid-stream |
| `tb_peak_finder` | random spikes and regions with interval widths 1, 2, 3, 5 and 8; multi-peak frames |
| `tb_tq_packer` | every packet field, time formula, overflow when the FIFO is full |
| `tb_shift_reg`, `tb_sync_fifo` | delay, order, full/empty |
| `tb_tq_reco` | end to end at default sizes (below) |
| `tb_noise_ratio` | hit separation at four noise levels (below) |

`tb_tq_reco` streams 40 000 frames (320 µs) of synthetic waveform into the
top level, with every parameter at its default. The waveform has an
8000-count baseline, ±3 counts of noise, and 140-count, 40 ns pulses: single
hits, and pairs spaced 20, 28, 40 and 48 ns (0.5 to 1.2 pulse widths). A
sample-level reference model of the whole chain predicts every packet, and
each packet read back must match one of them exactly. During the run the test
also:

* re-seeds the baseline;
* rejects pulse frames from the baseline;
* raises trigger primitives and trigger regions;
* reloads the deconvolution taps mid-stream and refuses one reload;
* produces a two-peak frame;
* overflows the FIFO.

It counts each of these events and fails if one never happens. It also checks
the 11-clock packet latency.

With the placeholder taps, about 95 % of the synthetic events come out with
the right number of hits:

| event | right hit count |
|---|---|
| single hit | 91 / 96 |
| pair, 20 ns | 94 / 96 |
| pair, 28 ns | 87 / 95 |
| pair, 40 ns | 92 / 95 |
| pair, 48 ns | 91 / 95 |

`tb_noise_ratio` repeats the pulse mix with roughly Gaussian noise. Its rms
is 0.030, 0.037, 0.050 and 0.076 of the pulse height, the four noise levels
of the published bench tests. The threshold is 5 rms and the peak interval
is 6. At each level, 81 % to 100 % of the events of each type come out with
the right number of hits. The worst case is the 40 ns pair at the noisiest
level, with 52 of 64. With these placeholder taps the interval matters: at 3,
noise wiggles on the deconvolved signal pass as extra peaks, and only 9 % to
72 % of events come out right.

These figures show that the mechanism works. They are not a measurement of
the published filters.

## Simulating

Every file is SystemVerilog 2017. Compile the package first. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb rtl/tq_pkg.sv tb/tb_tq_reco.sv --top-module tb_tq_reco
./obj_dir/Vtb_tq_reco
```

Replace `tb_tq_reco` with any other testbench name. Each testbench ends by
printing `TB_RESULT checks=N failures=M`. The end-to-end test takes a few
seconds.

## Files

* `rtl/tq_pkg.sv`: widths, tap defaults, latencies, packet struct
* `rtl/tq_reco.sv`: top level, one ADC stream
* `rtl/baseline_finder.sv`, `rtl/over_check.sv`: baseline tracking, threshold
  and subtraction
* `rtl/filter_wrapper.sv`, `rtl/fir_parallel.sv`, `rtl/fir_config_ctrl.sv`:
  filter chain, parallel FIR, tap reload
* `rtl/peak_finder.sv`: spike search
* `rtl/tq_packer.sv`: time stamp and packet
* `rtl/shift_reg.sv`, `rtl/sync_fifo.sv`: delay lines and FIFOs
* `tb/tb_*.sv`: testbenches
