# Asynchronous peak-event read-out for a SPAD direct-ToF flash LiDAR

A flash LiDAR builds a time-of-flight histogram in every pixel over many laser
pulses. A frame-based sensor has every pixel wait for a fixed number of pulses.
That number is sized for the worst pixel: a dark target at the far end of the
range. Bright or close pixels have a clear peak long before that and just wait.

This design lets each pixel decide for itself. Every few laser cycles the pixel's
histogram is checked: find the largest bin, estimate the background level, and
test the peak against a noise threshold. If the peak clears the threshold, the
pixel sends a *peak event* (which pixel, which bin, how many laser cycles it
took) and restarts its histogram at once. Pixels with a strong return therefore
report often and with low latency. Weak pixels report rarely. There is no frame
and no global readout signal.

The RTL covers the digital processing of one prototype configuration:

* 128 SPAD lines sampled by a 16-phase × 8-stage TDC (128 bins of 250 ps);
* 8 histograms of 128 bins × 10 bits;
* two processing elements (PEs), each shared by four histograms;
* an address-event (AER) arbiter, an event FIFO towards the host, and a
  dynamic-depth filter.

The analog parts (SPADs, quenching, front ends, laser) are outside the RTL.

## The per-pixel rule

Three run-time settings control each pixel:

* `L1`: the minimum number of laser cycles before a pixel may report;
* `L2`: the maximum number of cycles a histogram may run;
* `alpha`: the threshold in units of background standard deviations.

With `N` the number of laser cycles the pixel's histogram has accumulated,
each check does this:

```
if N > L2:                      reset histogram, N = 0           (no event: give up)
elif N > L1:
    i_max  = index of the largest bin,  h = its count
    BG     = background estimate (below)
    I_th   = BG + alpha * floor(sqrt(BG))
    if h > I_th:                emit event {id, i_max, N}; reset histogram, N = 0
# otherwise keep accumulating
```

The threshold follows from photon statistics. For large `N`, a background-only
bin is roughly Gaussian with mean and variance `BG`. A bin more than `alpha`
standard deviations above the mean is therefore unlikely to be background.
`alpha` sets the false-positive rate, and `L1` makes sure the Gaussian
approximation holds before any decision is made. Typical values: `L1` = 20–100,
`alpha` = 4–8, and `L2` equal to the exposure a frame-based sensor would use
(e.g. 2000).

## Data path

```
 phase[128][16] ─► tdc ──16384──► line_mux ──8×128──► histogram ×8 ──┐
   (SPAD samples)  │               (scan_sel)          128×10 bit     │ 4 histograms each
                   │ en                                               ▼
 laser_trig ───────┴── lc_start / lc_stage ─────────────►  pe_channel ×2
   └─► laser_trig_o                                   ┌─ pix_mux (4:1, 1280 bit)
                                                      ├─ pe_core  (peak, BG, sqrt, threshold)
                                                      └─ pe_ctrl  (schedule, N, L1/L2, req)
                                                             │ req/ack, 26-bit event
                                                             ▼
                                        aer ──wr_en──► event_fifo ──26──► host
                                         └──────────► dd_filter ──► dd_valid/dd_id/dd_pos
```

* **`laser_trig`** counts `PERIOD` = 25 clocks of 4 ns per laser cycle
  (10 MHz). It pulses the laser trigger and opens the TDC window for the first
  8 clocks.
* **`tdc`** receives, for every line and every 4 ns stage, the 16 samples taken
  on 16 clock phases 250 ps apart. Sample *k* of stage *s* is bin `16s + k`. A
  photon is a 0→1 transition of the sampled line, so a line can report several
  photons per cycle (a multi-event TDC). At the end of the window all 128
  lines' 128-bit hit vectors are ready. The multi-phase sampling flops are
  outside the RTL.
* **`line_mux`** picks 8 of the 128 lines (scan position `scan_sel`: lines
  `8·sel … 8·sel+7`).
* **`histogram`** adds one count to every bin that was hit, once per laser
  cycle. Bins saturate at 1023. A clear from the PE wins over an add.
* **`pe_channel`** serves four histograms: `pix_mux`, `pe_core` and
  `pe_ctrl`. Its peak ids are `ID_BASE … ID_BASE+3`, with `ID_BASE` = 4 × the
  channel number.
* **`aer`** grants one requesting channel at a time, in round-robin order. It
  writes the event into the FIFO and acknowledges the channel. While the FIFO
  is full, requests wait (`f_stall`).
* **`event_fifo`** holds 16 words of 26 bits for the host.
* **`dd_filter`** turns the accepted events into dynamic-depth events (see
  below).

## The four-laser-cycle schedule

This is the part that is hardest to see from the code. One PE serves four
pixels in turn. A *slot* is four laser cycles. At the start of a slot `PIX_SEL`
advances, and the PE starts scanning the next pixel's histogram. The scan is
**stage 1**. At the same time, **stage 2** finishes the judgement of the pixel
scanned in the previous slot. Both stages use the time while the TDC
measures and the wait until the next laser pulse:

| laser cycle of slot | TDC stages 0–3 (clk 0–3) | TDC stages 4–7 (clk 4–7) | wait (clk 8–24) |
|---|---|---|---|
| 0 | S1: max of bins 0–15 · S2: sample S1 result | S1: bins 16–31 · S2: sqrt bit 5 | |
| 1 | S1: bins 32–47 · S2: sqrt bit 4 | S1: bins 48–63 · S2: sqrt bit 3 | |
| 2 | S1: bins 64–79 · S2: sqrt bit 2 | S1: bins 80–95 · S2: sqrt bit 1 | |
| 3 | S1: bins 96–111 · S2: sqrt bit 0 | S1: bins 112–127 · S2: threshold | S1: max of all (clk 8) · S2: peak decision (clk 9) |

Exact clocks inside each half cycle (set in `pe_ctrl`):

* A 16-bin group goes through the 8-to-1 comparator tree in two halves, at
  clocks 0,1 or 4,5.
* Stage 2 samples at clock 2 of cycle 0.
* The square-root steps run at clock 6, 2, 6, 2, 6, 2 of cycles 0, 1, 1, 2,
  2, 3.
* The threshold is formed at clock 6 of cycle 3, and the decision is made at
  clock 9.
* The controller acts on the decision at clock 10: it clears the histogram
  and raises the request.

Consequences worth knowing:

* Each pixel is judged **once every 16 laser cycles** (4 pixels × 4 cycles).
* A decision comes out **8 laser cycles** after its scan began.
* `N` is captured when the scan starts. After a reset the next scans see
  `N = 8, 24, 40, 56, …`. With `L1 = 40` the first possible event therefore
  comes at `N = 56`, 64 laser cycles (6.4 µs) after the previous reset.
* The scan reads the live histogram while it keeps filling. The bins of one
  scan are therefore read up to 4 laser cycles apart.
* The reset at the decision throws away the cycles accumulated since the scan.
  This is the cost of not keeping a copy of the histogram.
* `PERIOD` must be at least 11 clocks to fit the schedule.

## Background estimate and square root

The background is not the mean of all bins, which would need a 128-input
adder. Instead it comes out of the peak search for free. Stage 1 keeps the
eight group maxima (16 bins each), so the maxima of the four 32-bin quadrants
are known. The background is the **smaller quadrant maximum in the half of the
histogram that does not hold the peak**. For example, a peak in bins 64–127
gives `BG = min(max(0–31), max(32–63))`. Taking the smaller quadrant keeps a
peak near the middle of the histogram out of the estimate. Because a maximum
of background bins is used rather than their mean, `BG` sits above the true
mean. This makes the threshold conservative.

`isqrt_iter` computes `floor(sqrt(BG))` one result bit per step (b = 32, 16,
…, 1). With partial root `n`, the trial `temp = ((n << 1) + b) << log2(b)`
equals `(n+b)² − n²`. If the remainder holds `temp`, then `b` is added to `n`
and `temp` is subtracted from the remainder. The error is always below one
count. Six steps cover 10-bit backgrounds.

## Event word, handshake and dynamic depth

The 26-bit word written to the FIFO is `{peak_id[5:0], N[12:0], peak_bin[6:0]}`.
The 20 low bits are the *event pack*:

* `N` tells the host how long the pixel needed, which is the basis of the
  published reflectivity estimate (event rate × depth²);
* `peak_bin` × 3.75 cm is the depth.

`pe_ctrl` holds `req` with a stable word until `ack` rises (four-phase
handshake). If a pixel produces an event while its channel's previous event
has not been acknowledged, the new event is dropped (`f_drop`). The pixel's
histogram is reset all the same.

`dd_filter` follows the "dynamic depth" idea. Like an event camera that
reports only intensity changes, it reports only depth changes. For every pixel
id it keeps the last three depths. Two consecutive 3-event moving averages
differ by `(d_k − d_(k−3))/3`, so the filter compares `d_k − d_(k−3)` with
`±THR3`. `THR3 = 8` bins is 3 × 0.1 m at 3.75 cm per bin. A larger change
gives a positive (farther) or negative (nearer) event on `dd_valid/dd_id/dd_pos`.
A pixel needs four events before it can report.

## Parameters

| Parameter | Default | Where the number comes from |
|---|---|---|
| TDC lines `N_LINES` | 128 | published block diagram |
| phases × stages | 16 × 8 | published block diagram |
| bins × bin width | 128 × 10 bit | published |
| bin size | 250 ps (3.75 cm) | published |
| histograms `N_HIST` | 8 | published block diagram |
| pixels per PE | 4 | published |
| PE channels | `N_HIST/4` = 2 | published block diagram |
| event pack / peak id / FIFO word | 20 / 6 / 26 bit | published block diagram |
| sqrt result | 6 bit, 6 steps | published algorithm |
| `PERIOD` | 25 clocks | derived: 10 MHz laser, 4 ns stage clock |
| `N` counter | 13 bit | own choice (holds `L2` up to 8191) |
| `alpha` | 4 bit integer | own choice |
| `FIFO_DEPTH` | 16 | own choice |
| `THR3` | 8 | derived from the 0.1 m DD threshold |

The shared constants live in `rtl/lidar_pkg.sv`. The top-level parameters are
on `async_lidar_top`.

## Where this RTL fills gaps or departs from the published description

* **How often a pixel is judged.** The published text calls the 4:1
  multiplexing "equivalent to X = 4". Its timing diagram, however, advances the
  pixel select once per four laser cycles. Following the diagram, each pixel
  is judged every 16 cycles.
* **Square-root length.** The text speaks of five clock cycles for the square
  root. The algorithm and the timing diagram both use six steps (bits 5..0).
  Six are built.
* **`N = L2`.** The text says a judgement happens for `L1 < N < L2`. The flow
  chart resets only for `N > L2`, so `N = L2` is still judged. The flow chart
  is followed.
* **Choices of this design, where the published description is silent:**
  * the event-pack contents;
  * the peak-id assignment (`4·channel + pixel`); the scan position is not in
    the event word, because the host sets it;
  * the tie rule (the lowest bin wins);
  * bin saturation;
  * the round-robin AER policy and the four-phase handshake;
  * dropping events while a request is outstanding;
  * the FIFO depth;
  * 0→1 edge detection in the TDC, and the line grouping of the 16:1 mux.
* **Line count.** The prototype's imager is described as 64 SPAD subgroups,
  while its block diagram shows 128 TDC lines. The RTL has 128 lines.
* **Depth for the DD filter.** The published DD results use sub-bin
  (centre-of-mass) depths computed on a PC. Here the filter works in hardware
  on the integer peak bin.
* **Latency.** The headline latency of 2.4 µs (at `L1 = 40`, 10 MHz) is not
  explained in enough detail to reproduce. This RTL needs 8 laser cycles
  (0.8 µs) from the start of a scan to its event. From a reset to the first
  possible event it needs 64 laser cycles (6.4 µs) at `L1 = 40`.
* **Not built.** The full on-chip array (64 × 32 macropixels, one PE per four
  macropixels) is not built. The 6-bit peak id addresses 64 pixels, so a
  larger array needs a wider id. Sub-bin interpolation and the reflectivity
  estimate are host software and are not built either.

## Simulating

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each
one prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.
For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/lidar_pkg.sv \
          tb/tb_async_lidar_top.sv --top-module tb_async_lidar_top -o sim
./obj_dir/sim
```

Put the package first on the command line. `-y rtl` lets Verilator find every
other module in `rtl/` by its file name. The full-size end-to-end test builds
in about 10 s and runs in under a second.

What the testbenches compare against:

* **`tb_cmp_tree8`, `tb_isqrt_iter`, `tb_histogram`, `tb_tdc`,
  `tb_event_fifo`, `tb_line_mux`, `tb_pix_mux`, `tb_laser_trig`.** Plain
  reference models. `tb_isqrt_iter` runs all 1024 inputs. `tb_tdc` decodes a
  random sample stream.
* **`tb_pe_core`.** A software model of peak, quadrant background, square root
  and threshold, with the two stages overlapped as in operation.
* **`tb_pe_ctrl`.** Checks the schedule above clock by clock, the `N`/`L1`/`L2`
  decisions, histogram clears, event words and dropped events. A stand-in core
  and a slow stand-in arbiter drive it.
* **`tb_pe_channel`.** Predicts every clear and every event word of a channel
  from four stand-in histograms.
* **`tb_aer`.** Checks that events arrive exactly once and in order, that
  grants alternate, and that nothing is written while the FIFO is full.
* **`tb_dd_filter`.** An exact moving-average model.
* **`tb_async_lidar_top`.** Runs the whole design at its default size for
  about 2000 laser cycles, with synthetic photons on all 128 lines. Six strong
  pixels, one background-only pixel and one flooded pixel make up the scene,
  followed by a switch of scan position. It checks every event's id, bin and
  `N`. It also requires each mechanism to occur at least once: event, forced
  reset at `L2`, judgement before `L1`, threshold miss, FIFO stall, dropped
  event, saturation, scan switch, and dynamic-depth event.
* **`tb_async_lidar_sweep`.** Runs the full-size design through a sweep of
  `L1` (20, 60, 100 at `alpha` = 8) and `alpha` (0, 2, 8 at `L1` = 60), with
  `L2` = 2000 and 1000 laser cycles per setting. The scene has returns of
  60 % down to 5 % per cycle and two background-only pixels. It checks these
  points:
  * after a pixel's first event, `N` is always 8 + 16k;
  * the strongest pixels report at the first scan with `N > L1`;
  * their event rate falls as `L1` rises;
  * false events (wrong bin, or from a background-only pixel) occur at
    `alpha` = 0 and fall to none at `alpha` = 8.

  Typical counts for the two 60 % pixels, per 1000 cycles: 61 events at
  `L1` = 20, 24 at 60, 16 at 100. This matches one event every `N + 8` =
  32, 80 and 112 cycles. False events: about 30 at `alpha` = 0, 1–3 at
  `alpha` = 2, none at `alpha` = 8.
* **`tb_async_lidar_motion`.** Radial motion on the full-size design (`L1` =
  40, `alpha` = 8). Three targets recede and three approach, each by one bin
  every 16 laser cycles, which is about 4 bins between events. Two targets
  are static. It checks that:
  * every peak bin lies within the span the target covered during the
    exposure;
  * receding pixels give only "farther" dynamic-depth events, and
    approaching pixels only "nearer" ones;
  * static pixels give none.

The testbenches check the published *algorithm*, as built here, against
models written separately from the RTL. They were not compared with measured
data from the prototype.
