# L-Sort in SystemVerilog: spike sorting by locating where each spike came from

On a high-density neural probe, one neuron firing shows up on several
neighbouring electrodes at once. Classic spike sorters cut a waveform window
around every spike and compute shape features from it, so they must buffer the
raw recording. L-Sort turns that redundancy into the feature. Every
electrode-level threshold crossing (a *peak*) has a known position on the
probe. The peaks of one spike are grouped, and their amplitude-weighted centre
of mass gives the spike's source position. Spikes are then clustered by
position, with a fixed distance threshold, since neurons sit at fixed places in
the tissue. The pipeline keeps no waveform history. It stores per-channel
filter state, a sorted window of recent magnitudes per channel, four
"ongoing spike" records and a table of cluster centres.

This RTL implements that pipeline for a 120-channel probe sampled at 30 kHz with
12-bit samples. It processes one sample per clock, so a 3.6 MHz clock keeps up
with the recording in real time.

```
 s_ch/s_data ──► lsort_iir_filter ──► lsort_peak_detector ──► lsort_spike_locator ──► lsort_cluster ──► m_time/m_cluster
 (raw 12 bit)    band-pass, DF-II     |x| > M x median(|x|)    group peaks, centre       online clustering
                 per channel          per channel              of mass (x, z)            of (x, z)
```

Every arrow is a valid/ready stream. A word moves when both valid and ready are
high in the same cycle. The stream words are defined in `rtl/lsort_pkg.sv`:

| stream | type | fields |
|---|---|---|
| input | `raw_sample_t` | channel (7 b), raw sample (12 b signed) |
| filter → detector | `filt_sample_t` | channel, filtered sample (16 b signed) |
| detector → locator | `peak_sample_t` | channel, filtered sample, `is_peak` |
| locator → clustering | `spike_t` | time step of the largest peak (32 b), x (5 b, um), z (11 b, um) |
| output | `sorted_spike_t` | time step (32 b), cluster index (5 b) |

Samples must arrive channel by channel, 0 to NCH-1, for each time step. The
locator counts time steps by watching for channel NCH-1.

## The median-threshold peak detector (`lsort_peak_detector`)

This is the most intricate block. A sample is a peak when its magnitude exceeds
M times the median magnitude of its channel's last N samples (N = 25). The
median makes the threshold robust to the spikes themselves. Sorting 25 values
from scratch for every sample would cost O(N²) comparators per sample. Instead,
each channel keeps its window *already sorted* in one RAM row of N entries. Each
entry is a 16-bit magnitude plus an age counter of ceil(log2(N+1)) = 5 bits. A
new sample then only has to be placed in the row, and one entry has to leave:

1. **Age.** Every counter is decremented on each access. The entry whose
   counter reaches 0 is the oldest sample: this gives the *oldest index*. A new
   entry starts at N, so it leaves exactly N samples later.
2. **Place.** The new magnitude is compared with all N stored magnitudes. The
   comparator results form a thermometer code, because the row is sorted, and
   a priority encoder turns them into the *insert index*: the number of stored
   entries below the new value. The oldest entry still counts here.
3. **Shift.** One multiplexer per entry builds the new row from the two
   indices:
   * insert ≤ oldest: entries insert..oldest-1 move up one place and the new
     sample lands at insert;
   * insert > oldest: entries oldest+1..insert-1 move down one place and the
     new sample lands at insert-1.

   For example, with the oldest at 5 and insert 3, entries 3 and 4 move to 4
   and 5. With the oldest at 2 and insert 5, entries 3 and 4 move to 2 and 3,
   and the new value goes to 4.
4. **Threshold.** The new row is written back. Its entry N/2 (entry 12 of 25)
   is the median, which is multiplied by M and compared with the new magnitude.

All of this happens in one clock cycle per sample. The work is O(N):
N comparators, N counter decrements and N multiplexers.

The row RAM has a synchronous read. A sample is read on one edge and written
back on the next, so a sample of the *same* channel on the very next cycle
would read a stale row. The block forwards the row it has just written in that
case. In normal round-robin operation this never happens.

After reset the block spends NCH cycles writing every row with the largest
magnitude (65535) and counters 1..N. Until a channel has seen 13 real samples,
its median stays at 65535, so no peaks are flagged during warm-up.

Every sample, peak or not, goes on to the locator with its `is_peak` flag,
because the locator keeps time from the sample stream.

## The spike locator (`lsort_spike_locator`)

The locator turns a stream of peaks into spikes with positions. It holds up to
four ongoing spikes (NBUF = 4). The recordings behind the design never showed
more than three at once. Each entry stores the following, 134 bits in all:

| field | bits | meaning |
|---|---|---|
| amp | 16 | magnitude of the largest peak so far |
| ch | 7 | channel of that peak |
| time | 32 | time step of that peak |
| Σamp | 21 | sum of peak magnitudes (room for 32 full-scale peaks) |
| Σamp·x | 26 | amplitude-weighted x |
| Σamp·z | 32 | amplitude-weighted z |

On every cycle exactly one of these happens:

* **Peak arrives.** Every valid entry tests two conditions: the peak's channel
  is within CH_TH channels of the entry's channel, and the current time step is
  within T_TH steps of the entry's time. If an entry passes, the peak is
  **merged** into the first such entry. Its magnitude and position are added
  to the three sums. If the peak is the largest so far, it also replaces the
  entry's amp, ch and time. If no entry passes, the peak opens a **new** entry
  after the last valid one. If all four entries are busy, the peak is
  **dropped** and `overflow_cnt` counts it.
* **No peak.** Entry 0 is the oldest spike, since entries are kept in creation
  order. If more than T_TH steps have passed since its peak time, no further
  peak can merge into it, so it is **sent**. The output carries its peak time
  and its position (X, Z) = (Σamp·x / Σamp, Σamp·z / Σamp), truncated to whole
  micrometres. Entries 1..3 then move down one place. A send waits while the
  previous output word has not been taken.

Electrode positions come from the channel number. Channel c sits at
x = (c mod 2)·20 um and z = (c div 2)·20 um: two columns of 60 electrodes,
20 um apart. The input stream is never stalled (`in_ready` = 1), because a live
recording cannot wait.

## Clustering (`lsort_cluster`)

Clustering follows the O-Sort scheme, with one fixed distance threshold
(DIST_TH = 10 um) used for both of its decisions. Each cluster holds a mean
position, kept with 4 fraction bits, and a spike count. For each spike:

1. The block scans all MAX_CL = 32 slots, one per cycle, using two multipliers
   for dx² + dz², and finds the nearest cluster.
2. If that cluster is within DIST_TH, the spike joins it and the mean moves by
   (p − mean)/(n + 1). Otherwise the spike opens a new cluster at its own
   position. When every slot is taken, the spike joins the nearest cluster
   anyway.
3. A second scan finds the cluster nearest to the one just updated. If it is
   within DIST_TH, the two clusters merge. The merged cluster takes the
   count-weighted mean of both, and the lower index survives.
4. The spike leaves with its time and its cluster index.

A spike takes 2·MAX_CL + 4 = 68 cycles. Spikes arrive thousands of cycles
apart, so this block is never the bottleneck. Cluster indices stay stable,
except that after a merge the higher index is retired and later spikes report
the lower one.

## The filter (`lsort_iir_filter`)

The filter is a per-channel band-pass in Direct Form II:
w = x − a1·w1 − a2·w2, then y = b0·w + b1·w1 + b2·w2. Its coefficients are
12-bit signed numbers with 10 fraction bits. The defaults
(b0, b1, b2, a1, a2) = (414, 0, −414, −1165, 195) are the first-order
Butterworth 300–6000 Hz band-pass at 30 kHz, scaled by 1024. Each channel's
two delay states (20 bits each, saturating) live in a memory of NCH entries.
The output is saturated to 16 bits.

## Timing

| block | throughput | latency |
|---|---|---|
| filter | 1 sample / clock | 2 clocks |
| peak detector | 1 sample / clock | 2 clocks |
| spike locator | 1 sample / clock | a spike leaves T_TH + 1 time steps after its largest peak |
| clustering | 1 spike / 68 clocks | 66 clocks to a valid output |

After reset, `s_ready` stays low for NCH cycles while the filter and the
detector clear their memories.

## Parameters

The defaults are the configuration described for the 120-channel recording.

| parameter (module) | default | origin |
|---|---|---|
| NCH | 120 | paper |
| N / N_MED, median window | 25 | paper |
| M / M_TH, threshold factor | 7 | this design (≈ 4.7 σ for Gaussian noise, because median\|x\| = 0.6745 σ) |
| NBUF, spike buffers | 4 | paper |
| CH_TH, channel distance for merging | 8 | this design (4 rows, 80 um) |
| T_TH, time distance for merging / sending | 15 steps | this design (0.5 ms) |
| MAX_CL, cluster slots | 32 | this design |
| DIST_TH, clustering distance | 10 um | this design |
| filter coefficients | see above | this design (Butterworth design of the paper's band) |
| widths in `lsort_pkg` | 12-bit input, 16-bit filtered, 32-bit time | input width from the paper, the rest this design |

`CH_W` = 7 in `lsort_pkg` limits the design to 128 channels. For the
384-channel variant also mentioned in the source, set `CH_W` = 9 and NCH = 384.
With those settings the detector RAM becomes 384 × 525 bits ≈ 25.2 kB.

## What follows the source and what does not

The following are taken from the published description: the four stages and
their order; the stream handshakes; the filter type, band and coefficient
format; the detector's RAM of (counter, value) pairs with the counter starting
at N; oldest and insert indices and the shifting multiplexers; the median
threshold; the four-entry spike buffer with its six fields and its
new/merge/send/shift rules; the peak-based centre of mass; and O-Sort with a
fixed threshold. The 134-bit buffer width and the 21 bits per window entry
(525 bits for 25 points) agree with the figures given there.

The following are this design's own choices, because the source does not give
them:
* all numeric thresholds (M, CH_TH, T_TH, DIST_TH) and the filter coefficients;
* the probe layout;
* the exact O-Sort update and merge arithmetic;
* magnitudes rather than signed values in the median window;
* the warm-up initialisation;
* dropping peaks when the buffers overflow;
* joining the nearest cluster when all slots are full;
* the single-cycle pipelines, the forwarding paths and the stream word
  layouts.

There is one point where the description can be read two ways. In one reading
the spike buffer is sent once enough time has passed "after the newest merged
peak". The buffer drawing, however, holds only one time field, the time of the
largest peak. This design uses the largest-peak time for both the merge test
and the send test. With that choice, no peak that could still merge arrives
after the spike has been sent.

Not part of this RTL: the processor system and the DMA engine that feed and
drain the streams, and the packing of the two streams into bus words. The top
exposes the streams as plain ports instead.

## Verification

Each block has a self-checking testbench in `tb/` that compares it with an
independent model written with plain integers and queues:

* `tb_lsort_iir_filter`: 64-bit reference filter. Checks full rate, random
  channel order with back-to-back repeats (forwarding), random stalls and
  saturation.
* `tb_lsort_peak_detector`: reference that re-sorts each window from scratch.
  Checks the whole written-back row for every sample, as well as the output
  flag. Covers ties, forwarding, stalls, and 1 sample/clock at 2 clocks of
  latency. It runs two instances, with N = 25 and N = 50 (the larger window
  size in the median-cost comparison).
* `tb_lsort_spike_locator`: reference list of ongoing spikes on synthetic
  spikes. Checks positions, times, overflow count and output stalls.
* `tb_lsort_cluster`: reference cluster table. Checks joins, new clusters, a
  forced merge, full-table behaviour, and the 2·MAX_CL + 2 latency.
* `tb_lsort_top`: the whole pipeline at its default size. It runs about
  1.2 million samples, which is 10,000 time steps of a synthetic 120-channel
  recording with five fixed neurons and one drifting neuron, plus noise. It
  checks that the input never stalls, that at least 90 % of the injected spikes
  are reported, and that each fixed neuron maps to its own cluster for at
  least 90 % of its spikes. It also checks that every mechanism occurs at least
  once: peak, new, merge, send, overflow, cluster new, join, merge and output
  stall. About 45 extra spikes come from noise crossing the threshold, as
  expected for a 25-sample median at M = 7.

Each testbench prints `TB_RESULT checks=N failures=F`. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/lsort_pkg.sv tb/tb_lsort_top.sv --top-module tb_lsort_top
./obj_dir/Vtb_lsort_top
```

Replace `tb_lsort_top` with any other testbench name. The full-size run takes a
few seconds.

## Limits

* The thresholds and coefficients were not tuned on recorded data. Only the
  synthetic recording in `tb_lsort_top` has been run. The clustering accuracy
  reported for the original algorithm has not been reproduced.
* A peak that arrives while all four spike buffers are busy is lost. Spikes on
  far-apart channels that overlap in time use separate buffers.
* A large spike can spread over more than CH_TH channels. It is then reported
  as a main spike plus a small fragment. The testbench tolerates this.
* The sum widths hold 32 full-scale peaks per spike. The observed maximum was
  27 peaks per spike.
