# L-Sort: a streaming spike sorter in SystemVerilog

High-density neural probes record hundreds of electrodes at 30 kHz each. Shipping all of that
off the implant is expensive. A spike sorter that runs next to the probe only needs to report
*which neuron fired when*, a few bits per spike. This RTL sorts spikes online in four steps:

1. band-pass filter every channel;
2. flag samples whose magnitude stands out from that channel's recent median;
3. group the flagged samples (peaks) of one spike across neighbouring channels and time, and
   take the channel with the largest peak as the spike's position;
4. cluster spikes by position, so that each cluster is a putative neuron.

Results leave the chip on a single wire.

Two ideas keep the hardware small.

- **Approximate median-of-median threshold.** The threshold is a multiple of the median
  magnitude of the last 25 samples of each channel. It is not computed over a 25-sample
  window. Two tiny incremental median stages of four entries each approximate it instead.
  Per channel that needs 104 bits of state instead of a 25-entry sorted buffer.
- **Localisation by the central channel.** On a dense probe, the electrode with the largest
  peak is a good estimate of where the neuron is. Using it avoids centre-of-mass sums and
  divisions. The spike's "feature" for clustering is then a single channel index.

All logic is time-multiplexed. One sample of one channel enters per clock cycle, and the
channels arrive interleaved. Every per-channel state lives in an SRAM word addressed by the
channel index. For 384 channels at 30 kHz the clock is 384 × 30 kHz = 11.52 MHz.

The design follows the L-Sort architecture published by its authors. The structure, the
memory sizes and the algorithms are theirs. Many details the publication leaves open are
choices made here; they are listed in [Departures and open points](#departures-and-open-points).

## Pins and data flow

```
 din[11:0], is_first_channel
        │
   iir_filter ──(2 cycles)──► peak_detector ──(1 cycle)──► spike_locator ──► osort_cluster ──► result_uart ──► sorting_out
   24 x 384 1r1w SRAM          104 x 384 1r1w SRAM         16-entry bank     9 x 384 1-port SRAM
                                                            (registers)       valid/ready        valid/ready
```

| pin | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | sample clock, NUM_CH × 30 kHz |
| `rst_n` | in | 1 | asynchronous active-low reset |
| `din` | in | 12 | signed raw sample of the current channel |
| `is_first_channel` | in | 1 | high with the sample of channel 0; starts a new timestep |
| `n_th` | in | 8 | detection factor N_th, unsigned, 2 fractional bits (64 = 16.0) |
| `clu_th` | in | 9 | clustering distance threshold, in channels |
| `sorting_out` | out | 1 | serial results, idle high |

- **Channel and timestep numbers.** No channel number enters the chip. The filter counts
  samples from the last `is_first_channel` to number the channels. It counts
  `is_first_channel` pulses to number the timesteps (32 bits).
- **Frame length.** A frame may be shorter than `NUM_CH`: the same hardware sorts 120
  channels at 3.6 MHz. Samples beyond channel `NUM_CH-1` are ignored.
- **Timing.** The filter's result appears 2 cycles after its sample, and the detector's peak
  flag 1 cycle after that.
- **Buffering and back-pressure.** A spike waits in the bank until no further peak of it can
  come, about `SEND_DELAY` timesteps (≈ 2000 cycles at 384 channels). It then goes to
  clustering and out on `sorting_out`. Clustering and the output are joined by valid/ready
  handshakes. A busy output therefore stalls clustering, and busy clustering keeps spikes in
  the bank a little longer. The bank keeps accepting peaks meanwhile. Nothing upstream of
  the bank ever stalls, so the sample stream never has to pause.

## Filter (`iir_filter`)

The filter is a first-order Butterworth band-pass, 300 Hz to 6 kHz at 30 kHz sampling. Its
denominator is second order. It is realised in Direct Form II:

```
w[n] = x[n] - a1·w[n-1] - a2·w[n-2]          a1 = -1165/1024, a2 = 195/1024
y[n] = b0·w[n] + b1·w[n-1] + b2·w[n-2]       b0 = 414/1024, b1 = 0, b2 = -414/1024
```

- **Coefficients.** Each is 12-bit signed with 10 fractional bits. They are the
  bilinear-transform values (0.4046, 0, -0.4046; 1, -1.1376, 0.1908) rounded to that
  format.
- **Arithmetic.** Every product sum is shifted right arithmetically by 10, which floors it.
  `w[n]` and `y[n]` saturate to 12 bits.
- **State.** A channel's two delay elements form one 24-bit word of a 1r1w SRAM with
  `NUM_CH` words.
- **Pipeline.**
  - Cycle 1 reads the channel's word.
  - Cycle 2 computes `w[n]` and `y[n]` and writes the updated word back.
  - The result is registered at the end of cycle 2.
- **Look-ahead outputs.** `la_valid`/`la_ch` announce, one cycle early, which channel will
  come out next. The detector uses them to start its own SRAM read in time.
- **Start-up.** During the first frame after reset, the state reads as zero. The SRAM
  therefore never needs clearing.

The testbench checks the arithmetic bit-exactly against a model and the 2-cycle latency. It
also checks that a 3 kHz tone passes, and that DC and a 100 Hz tone are removed.

## Detector (`peak_detector`, `inc_median_stage`)

A sample `x` of channel `c` is a peak when

```
|x| > (N_th · M) >> 2
```

Here `M` is an estimate of the median of `|x|` over the channel's recent samples. Peaks are
judged by magnitude, so negative and positive excursions both count.

### One incremental median stage

An exact running median of five samples is cheap if the four previous samples are kept
**sorted** and each carries an **age** (3 = newest … 0 = oldest). For a new magnitude `x`,
`inc_median_stage` does the following:

1. It compares `x` with the four stored entries. The number that are `<= x` is the insert
   position of `x`, so four comparators replace a sort.
2. It reads the median of the five values directly:
   - `list[2]` if `x` goes above it;
   - `x` itself if it lands in the middle;
   - `list[1]` otherwise.
3. It drops the entry of age 0 and decrements the other ages. It inserts `x` with age 3 at
   its position. Multiplexers steered by the two indices form the new list, which stays
   sorted.

Each entry is 11 + 2 bits, so a stage is 52 bits.

### Two stages: the median-of-median approximation

```
|x| ──► stage 1 ──m1──► stage 2 ──m2──► threshold
        (rewritten        (rewritten only
         every timestep)   every 5th timestep)
```

- **Stage 1.** It takes every new magnitude, and its output `m1` is the exact median of the
  last five samples.
- **Stage 2.** It takes `m1` as its "new sample", and its output `m2` is used as `M`. Its
  list is written back only on every fifth timestep. The stored values are therefore the
  medians of successive, nearly disjoint groups of five samples.
- **Result.** `m2` is the median of four such group medians plus the current `m1`. That is
  close to the median of medians of 25 samples, and needs 104 bits per channel: two lists
  of four 13-bit entries. An exact 25-sample median would need a 25-entry sorted buffer
  with 5-bit ages.

The five-timestep phase is kept once for all channels. It advances on the sample of
channel 0.

### Start-up and the 1-cycle timing

- **Initial lists.** The SRAM is not cleared. In the first frame after reset, both lists of
  a channel are loaded with that sample's own magnitude (ages 3, 2, 1, 0).
- **Warm-up.** No peak is reported until `WARMUP` = 25 frames have passed, so the lists
  have filled with real data first.
- **Timing.** The state read is issued from the filter's look-ahead, so the word arrives
  together with the sample. The comparison, the two stages and the write-back all happen in
  that cycle. `is_peak`, the peak's channel and its magnitude are registered one cycle after
  the sample.

### Threshold behaviour worth knowing

- **Small medians.** `M` is a median of magnitudes, not a standard-deviation estimate. On
  very quiet or heavily quantised input it can become 0, and then any nonzero sample is a
  peak. Choose `N_th` with the real noise level in mind; 16 (`n_th = 64`) is used in the
  tests.
- **Occasional false peaks.** The 5 × 5 estimate fluctuates more than a true 25-sample
  median. On pure noise an isolated sample occasionally crosses the threshold. In the
  end-to-end test this happened once in about 200,000 noise samples.

## Spike bank (`spike_locator`)

A spike seen by a dense probe produces peaks on a few neighbouring channels over a few
timesteps. The locator holds up to 16 *ongoing spikes* in a bank of registers. Each buffer
holds the timestep, channel and amplitude of the largest peak seen so far for that spike.
Buffers fill in order of creation: buffer 0 is always the oldest, and the occupied ones are
contiguous.

In each cycle exactly one of these happens.

- **A peak that matches.** A peak arrives within `CH_WIN` = 4 channels of a stored spike
  and at most `TS_WIN` = 5 timesteps after its stored peak. All 16 comparisons run in
  parallel, and the lowest-numbered match wins.
  - If the new peak is larger, it replaces the stored timestep, channel and amplitude.
  - Otherwise the buffer is left alone.
- **A peak with no match.** It opens a new spike in the first free buffer. If all 16 are
  in use, the peak is dropped and `peak_dropped` pulses. The top leaves that pin
  unconnected.
- **No peak.** If the current timestep is more than `SEND_DELAY` = 5 timesteps past buffer
  0's stored timestep, that spike is finished.
  - Its timestep and channel (the central channel, i.e. its position) go to the output
    register.
  - The bank shifts down by one.
  - This happens only while the output register is free.

With 384 channels, five timesteps are 1920 cycles. That is the ≈ 2000-cycle wait between a
spike's largest peak and its release. Only buffer 0 is ever tested for release. A younger
spike whose largest peak is older than buffer 0's therefore waits behind it; the wait is a
few timesteps at most.

## Clustering (`osort_cluster`)

Clusters are positions. The cluster table has 384 words of 9 bits in a single-port SRAM; each
word is a cluster's centre, a channel index. The value `9'h1FF` marks a free word, and the
word address is the cluster number. For a spike at position `p`:

1. **Scan.** Read every word ever used, one per cycle, and track two things:
   - the nearest centre (ties go to the lower index);
   - the first free word.
2. **Decide.** Compare the nearest centre with the threshold.
   - If `|c - p| <= clu_th`, the spike joins that cluster, whose centre moves half-way:
     `c' = (c + p + 1) >> 1`.
   - Otherwise a new cluster opens at `p`, in the first free word or the next never-used
     one.
   - If the table is full, the spike joins the nearest cluster regardless.
3. **Emit.** Send the result (timestep, cluster number).
4. **Merge check.** This runs only if an existing cluster moved. Scan again for the centre
   nearest to `c'`, excluding the cluster itself. If it is within `clu_th`:
   - the two clusters merge;
   - the lower number survives, with the centre half-way between the two;
   - the higher number is freed;
   - a merge result (removed, kept) is emitted.

- **Timing.** With `n` words in use, a spike's result is ready `n + 3` cycles after it was
  accepted, or 2 cycles when the table is empty. A merge check costs about `n + 4` more
  cycles.
- **Throughput.** A new spike is accepted only when the previous one is finished, at most
  about `2n + 8` cycles later. Spikes are sparse, and the bank holds spikes that arrive
  while clustering is busy.
- **Centre update.** A 9-bit word has no room for a member count. The centre update is
  therefore a fixed half-way step, not a running mean.

## Output frames (`result_uart`)

`sorting_out` idles high. A result is one frame, one bit per cycle, most significant bit
first:

```
spike:  0 | 1 | timestep[31:0] | cluster[8:0]        | 1 ...
merge:  0 | 0 | removed[8:0]   | kept[8:0]           | 1 ...
        ^start ^kind                                   ^at least one idle bit
```

- A spike frame takes 43 cycles and a merge frame 20, each plus the idle bit.
- A result accepted at one clock edge drives its start bit from the next edge.
- The idle bit between frames lets a receiver find the next start bit even when frames
  follow back to back.

## Memories (`sram_1r1w`, `sram_sp`)

These two modules stand for compiled SRAM macros:

| instance | type | words x bits | total bits |
|---|---|---|---|
| filter state | 1r1w | 384 x 24 | 9,216 |
| detector state | 1r1w | 384 x 104 | 39,936 |
| cluster table | single port | 384 x 9 | 3,456 |

- **Behaviour.** Reads are synchronous, with the data on the next cycle. A read in the same
  cycle as a write to the same address returns the old word; the sorter never does this.
  There is no reset.
- **Swapping in a macro.** To use a vendor macro, replace these modules with wrappers of
  the same ports.
- **Other state.** Everything else is in flip-flops, mostly the 16 × 52-bit spike bank.

## Departures and open points

The published design fixes the structure, but not everything. The following differ from the
publication, or were not specified by it.

- **Detector state width.** The publication gives the detector state both as 104 bits per
  channel and, in its memory breakdown, as 102 bits. This RTL uses 104: two stages of four
  entries of an 11-bit magnitude and a 2-bit age. It is not clear which two bits the
  102-bit figure saves.
- **Clock frequency.** The clock is 11.52 MHz, exactly 384 × 30 kHz. The publication quotes
  11.54 MHz for its 384-channel build.
- **Filter coefficients.** The values are not published. The standard Butterworth design,
  rounded as above, is used.
- **Filter arithmetic.** The 12-bit saturation of `w` and `y` and the floor rounding are
  choices made here.
- **Detector details.** Several details are choices made here:
  - the format of N_th: an 8-bit input with 2 fractional bits;
  - the use of magnitudes;
  - the tie rule: a new sample goes above equal stored ones;
  - the start-up: self-initialisation and a 25-frame warm-up.
- **Locator windows.** `CH_WIN`, `TS_WIN` and `SEND_DELAY` are not published. `SEND_DELAY`
  was chosen to match the ≈ 2000-cycle wait the publication shows. Dropping peaks when the
  bank is full is also a choice made here.
- **Clustering insides.** The publication states only the O-Sort steps: join or create,
  update, merge similar clusters. It also states that the distance threshold is a fixed,
  programmable value. The following are choices made here:
  - the table layout;
  - the sequential scan;
  - the half-way centre update;
  - the merge rule: lower number kept, a merge frame emitted.

  The publication shows about 20 cycles from located spike to output. Here the time grows
  with the number of clusters.
- **Output frame.**
  - *Field order.* The spike frame sends the timestep before the cluster number, as the
    publication's prose describes. Its timing diagram places the cluster field left of the
    time field, with the start bit at the right-hand end of the frame. That agrees with the
    prose if the diagram is read from right to left, but the diagram does not say which way
    it runs.
  - *Field widths.* The 32-bit timestep and the 9-bit indices are choices made here.
  - *Idle bit.* So is the trailing idle bit.
- **Configuration inputs.** How the thresholds are loaded is not described. They are plain
  input pins here, along with an asynchronous reset.
- **Pad ring.** The chip's 5 V pad ring is not part of this RTL; the top's ports are the
  core's signals.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog if it hangs.

| testbench | what it checks |
|---|---|
| `tb_sram_1r1w`, `tb_sram_sp` | random reads and writes against a reference array, read latency, hold of read data |
| `tb_iir_filter` | bit-exact against an integer model on 5 channels; a 3 kHz tone passes, DC and a 100 Hz tone are removed, full-range noise exercises saturation; 2-cycle latency; samples before the first frame are ignored |
| `tb_inc_median_stage` | 60,000 random lists: median against a sort of the five values, output list sorted, ages correct, oldest entry removed |
| `tb_peak_detector` | 3 channels against a model that keeps each channel's sample history and recomputes both stages; warm-up; stage-2 cadence; 1-cycle latency |
| `tb_spike_locator` | the worked example of the publication's locator figure; a random run against a queue model with output stalls and bank overflow |
| `tb_osort_cluster` | a directed run (join, new, merge, re-use of a freed word); a random run against a model; result latency |
| `tb_result_uart` | random spike and merge results decoded from the wire, including back-to-back frames |
| `tb_lsort_top` | end to end with the top at its default parameters: 384 channels and then, after a reset, 120 channels on the same hardware |

The end-to-end test builds a synthetic recording:

- smoothed noise on every channel;
- biphasic spikes spread over ±3 channels, with:
  - five isolated neurons;
  - a group of three neurons close enough to be merged;
  - a final burst of more than 16 simultaneous neurons to overflow the bank.

It checks the following.

- Each neuron spike is located exactly once, at the right channel. At most two extra
  detections on pure noise are allowed.
- The frames decoded from `sorting_out` carry the located timesteps.
- Each isolated neuron keeps one cluster of its own.
- A merge happens.
- Every mechanism occurs at least once:
  - warm-up;
  - a stage-2 update;
  - a larger peak replacing a stored one, and a smaller peak leaving it alone;
  - concurrent spikes;
  - a stall of the locator and of clustering;
  - a new cluster and a join;
  - a bank overflow.

The RTL also carries a few concurrent assertions, checked when simulating with `--assert`:

- an offered spike or result stays unchanged until it is taken;
- the bank never holds more than `NUM_BUF` spikes;
- the output line is high whenever the serialiser is ready;
- a channel announced on the detector's look-ahead input arrives on the next cycle.

Run a testbench with plain Verilator (5.x), for example:

```
verilator --binary --timing --assert -Irtl rtl/lsort_pkg.sv rtl/*.sv tb/tb_lsort_top.sv \
          --top-module tb_lsort_top -Mdir obj_top && obj_top/Vtb_lsort_top
```

The full-size end-to-end run, 2 × 560 timesteps, takes well under a second. Verilator has
only two signal states, so every register that is read is either reset or written before
use.

## Changing the design

- `NUM_CH` sets the depth of both state memories and the frame length limit. Keep it at or
  below 511, since channel and cluster indices are 9 bits wide and `9'h1FF` is reserved.
- The detector factor `n_th` and the cluster threshold `clu_th` are pins, adjustable at run
  time.
- These parameters of `lsort_top` trade accuracy against area and latency:
  - `NUM_BUF` (bank size);
  - `CH_WIN`/`TS_WIN` (what counts as the same spike);
  - `SEND_DELAY` (how long a spike waits for more peaks);
  - `WARMUP`, at most 63, since the frame-age counter is 6 bits wide.
- The filter coefficients are parameters of `iir_filter`. `S2_EVERY`, the stage-2 update
  period, is a parameter of `peak_detector`.
- Shared types and widths (sample, magnitude, timestep, channel, result frame) are in
  `rtl/lsort_pkg.sv`.
