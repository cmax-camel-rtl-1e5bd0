# CMAX-CAMEL: a coarse-to-fine contrast-maximisation engine in SystemVerilog

An event camera does not produce frames. Each pixel reports a timestamped
event, `(x, y, t, polarity)`, when its brightness changes. If the camera
rotates with angular velocity ω, the events from one scene edge smear across
the sensor. Now undo that rotation: move every event back to a common
reference time using a guess for ω, and accumulate the moved events into an
image. For a good guess the edges are sharp and the image has high contrast.
For a bad guess the image is blurry. This is *contrast maximisation* (CMAX).
The motion estimate is the ω that maximises the variance of this image of
warped events (IWE), after a light Gaussian blur. An optimiser running on a
CPU climbs that variance using its gradient with respect to ω.

This engine does the expensive part of every optimiser step in hardware. For
a window of up to 40,000 events and a hypothesis ω it returns:

- the variance of the blurred IWE;
- the three components of the variance gradient;
- a decision about how finely the next step should work.

It implements the design published as CMAX-CAMEL: a coarse-to-fine engine
organised around its memories. This code is an independent implementation.
The paper gives the architecture and the algorithms. Word widths, number
formats, handshakes, the register map and many small policies are this
design's own choices, and each one is marked where it appears.

## The computation

The engine assumes a rotation-only motion model. The camera has focal lengths
`fx, fy` and principal point `cx, cy`. Each event is warped by ω to the
reference time `t_ref`:

```
xn = (x-cx)/fx            yn = (y-cy)/fy            dt = t - t_ref
B  = 1 + xn^2             D  = 1 + yn^2             XY = xn*yn
u  = fx (XY wx - B wy + yn wz)
v  = fy (D wx - XY wy - xn wz)
x' = s (x - dt u)         y' = s (y - dt v)
```

Here `s` is the resolution scale of the current stage. The warped point
votes into its four neighbouring pixels with bilinear weights. The same votes,
differentiated with respect to ω through the Jacobian rows

```
r_x = s dt [fx XY, -fx B,  fx yn]
r_y = s dt [fy D,  -fy XY, -fy xn]
```

build three more images, `dIWE_x`, `dIWE_y` and `dIWE_z`. All four images are
blurred with the same Gaussian. With `I` the blurred IWE, `D_j` the blurred
`dIWE_j`, and `P` the number of pixels:

```
S1 = Σ I      S2 = Σ I²      G_j = Σ I·D_j      T_j = Σ D_j
variance   = S2/P - (S1/P)²
gradient_j = (2/P) (G_j - S1·T_j/P)
```

The engine never stores a blurred image. It keeps only these eight running
sums as the blur streams out, and the host forms variance and gradient from
them.

## Coarse-to-fine stages and the stage policy

The engine works at three scales:

| stage | s   | grid (W_s × H_s) | groups P | blur taps | events kept per pixel group |
|-------|-----|------------------|----------|-----------|-----------------------------|
| 1/4   | 1/4 | 60 × 45          | 2,700    | 3         | every 4th: ceil(n/4) of n   |
| 1/2   | 1/2 | 120 × 90         | 10,800   | 5         | every 2nd: ceil(n/2) of n   |
| 1     | 1   | 240 × 180        | 43,200   | 9         | all                         |

Coarse stages are cheap in two ways: the image has fewer pixels, and fewer
events are used. Events that land in the same coarse pixel are subsampled, so
the keep ratio equals `s`.

The engine decides when to move to a finer stage. Each iteration it compares
the variance with the variance of the previous iteration at the same stage:

```
gain g = (V - V_prev) / |V_prev|
g >= tau_s            : stay at this stage (KEEP)
g <  tau_s, s < 1     : go to the next finer stage, re-sort, evaluate (PROMOTED)
g <  tau_s, s = 1     : stop (DONE)
```

The thresholds `tau_s` are host registers in Q16. The paper chose its values
empirically and does not publish them.

The engine never divides. It uses the scaled variance `V = P·S2 − S1²`, which
is `P²` times the variance, and evaluates the test as
`(V − V_prev)·2^16 ≥ tau_s·|V_prev|`. The `P²` factor cancels, because `V` and
`V_prev` always come from the same stage. `V_prev = 0` (an empty image) is
treated as saturated. That rule is this design's own.

The host runs the optimiser. This split between engine and host is this
design's choice. The host has two commands:

- **START** opens a new window. The stage goes to 1/4, the sorter runs, and
  the first evaluation sets `V_prev`. The decision reads READY.
- **ITER** tells the engine that the host has written a new ω. The engine
  evaluates at the current stage and applies the test above. On PROMOTED it
  has already re-sorted and evaluated at the new stage, so the returned sums
  belong to the new stage. On DONE the host should stop and keep its last ω.

## Data path

```
sensor port ─> event memory ─┬─> shared warp ──┬─(sort mode)─> sorter tables
                             │                 │                  │
                             └──── feeder <────┼──────────────────┘
                                               v
                                        bilinear voting
                                               v
                                  accumulation writer (16 lanes)
                                               v
                               IWE / dIWE_x,y,z : 4 channels × 4 banks
                                               v
                                        channel streamer
                                               v
                                    4 × blur ─> statistics ─> APB
```

One event enters the pipeline per clock. The warp front-end is shared: in
sort mode its results go to the sorter, otherwise to voting.

### Pixel-grouped sorting (`cmax_sorter`)

This runs once per stage entry, with the ω current at that time. It has three
passes and seven tables:

1. **Count.** Each event is warped at the new scale. Its grid index `p_act`
   (or "invalid") goes into `gid[i]`, and `cnt[p]` is incremented.
2. **Prefix.** A scan over the `P` groups writes `offset[p]` and the group's
   policy (stride `1/s`, and active if `cnt > 0`). It also appends each active
   group to `active[]` and sets `ptr[p] = offset[p]`.
3. **Permute.** A second pass over `gid[]` writes the indices of the retained
   events into `perm[]` in group order. An event is retained when its rank
   within its group is a multiple of the stride. `cnt[]` is cleared during
   the prefix pass and reused as the rank counter.

Sorting takes `2P + 2N` cycles plus about 12.

Each group is then one *run*: a group index `p_ref` and a list of retained
events. The runs are reused for every iteration of the stage, even though ω
changes. An event sorted into group `p_ref` may therefore later warp to a
different pixel `p_act`, and the writer below has to handle that.

### Feeder (`cmax_feeder`)

The feeder walks `active[]` and the runs in `perm[]`. It reads each event and
tags it with `p_ref` and `last_in_pg`. The next run's table lookups overlap
with the current run, so runs follow each other with no bubble.

### Conflict-free banked voting (`cmax_bilinear`)

A pixel `(x, y)` of every image lives in bank `{y[0], x[0]}`, at bank address
`floor(y/2)·ceil(W_s/2) + floor(x/2)`. The four taps of a 2×2 bilinear
stencil always have four different parity pairs. They therefore always hit
four different banks, and all 4 taps × 4 channels can be written in the same
cycle without conflict.

The voting block outputs 16 `(address, delta)` pairs ordered by bank. The
deltas are:

- IWE: `p · w_x · w_y`
- dIWE_j: `p · (±w_y · r_x[j] ± w_x · r_y[j])`, where the signs are those of
  the bilinear weight's derivative.

An event whose stencil leaves the grid votes zero, but it keeps its tag, so
the end of its run is still seen.

### Local accumulation and pending merge (`cmax_accum_writer`)

This is the block that saves memory traffic. It has two levels:

- **Local accumulation.** An event is an *inlier* when it still warps into the
  group it was sorted into (`p_act == p_ref`). All inliers of a run hit the
  same four addresses. Their 16 deltas are summed in 16 registers, and one
  combined update goes to the inlier FIFO on `last_in_pg`. *Outliers* go to
  the outlier FIFO unchanged.
- **Pending merge.** One FIFO entry per clock is taken, inlier FIFO first, and
  split into 16 lanes (channel × bank). Each lane holds one pending update.
  An update to the pending address is added to it. Any other address first
  commits the pending value to memory.

At the end of an iteration, a flush commits every pending value. In the
end-to-end test, these two levels cut the number of memory read-modify-writes
to well under the number of raw votes. Both levels are the paper's.

This design adds an `almost_full` back-pressure signal from the FIFOs to the
feeder, with 10 entries of slack for the events still in flight. The feeder
pushes at most one entry per clock and the writer drains one, so this stall
does not occur in practice. It is a safety net only.

### Image memory (`cmax_iwe_mem`)

The image memory is 16 lanes of 10,800 × 32-bit words (675 KiB). A commit is
a two-cycle read-modify-write. The writer never commits the same address of a
lane in two consecutive cycles, so no forwarding is needed.

The streaming read port reads two horizontally adjacent pixels of every
channel per clock, and it clears what it reads. The images are therefore zero
again for the next iteration without a separate clearing pass. After reset, a
sweep of 10,800 cycles zeroes the memory, and commands wait until it ends.
Clear-on-read and the reset sweep are this design's choices.

### Streaming blur and statistics (`cmax_streamer`, `cmax_blur`, `cmax_stats`)

**Streamer.** The streamer walks the stage grid row by row, two pixels per
clock. After each row it inserts two zero beats, and after the last row four
zero rows. These push the last pixels out of the 9-tap filters with zero
padding at the borders. A stage takes `(H_s+4)(W_s/2+2)` cycles, plus one
cycle of read latency:

| stage | cycles |
|-------|--------|
| 1/4   | 1,569  |
| 1/2   | 5,829  |
| 1     | 22,449 |

**Blur.** The blur is separable. A horizontal 9-tap FIR takes the pixel pair
and the last four pairs and produces two results per clock. A vertical 9-tap
FIR works over nine line buffers of 64-bit words per channel. The result is
shifted back by 16 bits, because the two Q8 kernels multiply to Q16.

The 3-tap and 5-tap kernels of the coarse stages use the same 9-tap datapath
with zeros in the outer taps. Kernels are host registers. Their reset values
are binomial approximations of a Gaussian:

| taps | kernel                              |
|------|-------------------------------------|
| 3    | `64 128 64`                         |
| 5    | `16 64 96 64 16`                    |
| 9    | `1 8 28 56 70 56 28 8 1`            |

**Statistics.** Four blur instances, one per channel, run in lockstep. The
statistics block adds both pixels of each beat into 96-bit accumulators.

## Number formats

Every format is this design's own. The paper does not give any.

| quantity | format |
|---|---|
| event word | 32 bits: `{p, t[14:0] µs, y[7:0], x[7:0]}` (156 KiB for 40,000 events) |
| ω | signed 32 bit, unit 2^-40 rad/µs |
| `fx, fy, cx, cy` | Q16 pixels |
| `inv_fx, inv_fy` (host-supplied reciprocals) | Q30 |
| normalised and warped coordinates | Q16 |
| bilinear fractions | Q16 |
| Jacobian rows | Q8 pixels per (rad / 2^20 µs) of ω |
| IWE entries | Q12 |
| dIWE entries | Q8 |
| S1 | Q12 |
| S2 | Q24 |
| G_j | Q20 |
| T_j | Q8 |
| V, V_prev | 128-bit integers |

The warp keeps 96-bit intermediates and truncates only when it forms the
outputs. The testbench reference model (`tb/cmax_ref_pkg.sv`) uses exactly the
same integer arithmetic, so comparisons are bit-exact.

## Host interface

The host interface is an APB completer with no wait states. Registers are
32-bit words, and the whole map is this design's own:

| address | register |
|---|---|
| 0x000 | CTRL (write): bit0 START, bit1 ITER |
| 0x004 | STATUS: bit0 busy, bits 2:1 decision (0 ready, 1 keep, 2 promoted, 3 done), bits 5:4 stage shift (2 = 1/4, 1 = 1/2, 0 = 1), bit6 reset sweep running |
| 0x008 | number of events in the window |
| 0x00C–0x014 | ω_x, ω_y, ω_z |
| 0x018 | t_ref |
| 0x01C–0x030 | fx, fy, cx, cy, inv_fx, inv_fy |
| 0x034–0x03C | tau for 1/4, 1/2, 1 (Q16) |
| 0x040 + 12s + 4w | kernel of stage s: word w holds taps 4w..4w+3 |
| 0x100 + 4i | result word i |

Result words are read-only. 96-bit and 128-bit values are stored low word
first.

| words | content |
|---|---|
| 0–2 | S1 |
| 3–5 | S2 |
| 6–14 | G_x,y,z |
| 15–23 | T_x,y,z |
| 24–27 | V |
| 28–31 | V_prev |
| 32 | events fed |
| 33 | inliers |
| 34 | outliers |
| 35 | inlier group sums |
| 36 | pending-merge hits |
| 37 | memory commits |
| 38 | stall cycles |
| 39 | {promotions, iterations} |
| 40 | active groups |
| 41 | cycles of the last command |

`irq` pulses for one clock when a command has finished.

Events are written through a plain sensor port, `ev_wr_en/addr/data`, before
START. This port stands in for the dedicated DVS interface of the original
system.

## Timing at the default size

These are cycle counts for a window of N events, with `K_s` retained events at
stage s.

- **Stage entry:** `2P + 2N` for sorting, then one evaluation.
- **Iteration:** about `K_s + 25` for feeding and draining, plus the
  streamer's cycles.

With N = 40,000, the worst-case counts are:

| stage | sort   | one iteration      |
|-------|--------|--------------------|
| 1/4   | 85,400 | about 14,300       |
| 1/2   | 101,600 | about 36,600      |
| 1     | 166,400 | about 62,500      |

The original evaluation treats 5.72 ms per window at 200 MHz as the real-time
bound, which is 1,144,000 cycles. The three stage entries plus four
iterations per stage take about 807,000 cycles. The paper does not report
iteration counts.

## What differs from the original design

- **Not included.** The RISC-V host, its optimiser, the SoC memory and
  interconnect, the AXI scratch-pad port and the DVS sensor interface are
  outside this RTL. The top brings out APB and a sensor write port where they
  would connect.
- **Sorting tables.** The seven tables total 530 KiB (gid and perm for 40,000
  events; count/rank, offset, policy, active and pointer for 43,200 groups).
  The published figure is 520 KB; the original table widths are not known.
- **Line buffers.** 4 channels × 9 line buffers × 240 pixels × 64 bits =
  67.5 KiB. The original gives 68 KB in 36 buffers.
- **Subsampling policy.** "Keep ratio = s" is read as: keep every (1/s)-th
  event of each pixel group, starting with the first.
- **Range.** An event counts as in range when all four bilinear taps fall on
  the stage grid.
- **Sensor size.** 240 × 180 is assumed from the DAVIS240C camera of the
  evaluation sequences. The original gives no size.
- **Blur kernels and thresholds** are registers. The original values are not
  published.
- **Back-pressure** from the writer FIFOs to the feeder, clear-on-read, the
  reset sweep and the `V_prev = 0` rule are additions of this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_cmax_event_mem` | write/read, one-cycle read latency |
| `tb_cmax_warp` | random events and ω at all stages against the integer reference, 5-cycle latency |
| `tb_cmax_sorter` | tables and permutation against a model, cycle bound `2P+2N(+12)` |
| `tb_cmax_feeder` | run order, tags, `last_in_pg`, no bubbles, stall |
| `tb_cmax_bilinear` | banks, addresses and deltas against the reference; off-grid events |
| `tb_cmax_accum_writer` | committed memory equals the plain sum of all votes; counters; commits < votes; no back-to-back commit to one address |
| `tb_cmax_iwe_mem` | full-size random read-modify-write, streaming read, clear-on-read, reset sweep length |
| `tb_cmax_streamer` | beat order, addresses, padding, stage latency |
| `tb_cmax_blur` | random images at all stages against direct 2-D convolution, default and random asymmetric kernels, random input gaps |
| `tb_cmax_stats` | 96-bit sums against 128-bit sums, clear |
| `tb_cmax_ctrl` | handshakes and every decision against a policy model, with random block latencies |
| `tb_cmax_host_if` | register map, reset values, command pulses |
| `tb_cmax_camel` | the whole engine at its default parameters, small window (see below) |
| `tb_cmax_camel_poster` | the whole engine on a 40,000-event window, with the real-time bound |

`tb_cmax_camel` builds the engine at the default size. It writes a window of
600 clustered synthetic events, then plays the host:

1. START;
2. ITER with `tau = 0` (keep);
3. two ITERs that promote 1/4 → 1/2 → 1;
4. a keep;
5. a large change of ω that sends events off the grid and ends in DONE.

After each command, every statistic, V, the decision, the stage and the
counters are compared with a behavioural model that builds plain images and
convolves them directly. The testbench also counts how often each mechanism
fired: subsampling, inliers, outliers, pending hits, commits, keep, promote,
done, and off-grid events. A mechanism that never fires is a failure.

`tb_cmax_camel_poster` runs the same sequence on a full 40,000-event window,
the window size of the published hardware evaluation. The window holds
synthetic events: 4,000 scene points with ten events each, spread over the
sensor and over 5.72 ms. It also adds up the cycles the engine reports for
each command. The whole window (START and five ITERs through all three
stages) takes 635,177 cycles. That is 3.18 ms at 200 MHz, inside the 5.72 ms
real-time bound, and the testbench checks this bound. In this run, local
accumulation and pending merge together brought 1,178,860 memory commits
down from about 2.6 million raw tap updates (164,321 voted events × 16
lanes). The simulation takes a few seconds.

The same run shows how much of the memory traffic the two-level writer
removes at each stage. The reduction is the share of the 16 tap updates per
voted event that never reach memory:

| stage (aligned ω, few outliers) | tap updates | memory updates | reduction |
|---|---|---|---|
| 1/4 | 175,152 | 20,864 | 89 % |
| 1/2 | 359,776 | 80,376 | 78 % |
| 1 | 640,000 | 256,464 | 60 % |

The published design reports 85.8 %, 76.7 % and 56.2 % for the three stages
on real data. The synthetic scene is not that data, so the comparison shows
only the same trend. The last command of the run moves ω far from the sorted
grouping, so 80 % of the events become outliers and the reduction falls to
15 %. This shows that both levels rely on the runs staying grouped.

To simulate with Verilator, compile the package first, then the reference
package, then the rest:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/cmax_pkg.sv tb/cmax_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v cmax_pkg.sv) tb/tb_cmax_camel.sv --top-module tb_cmax_camel
./obj_dir/Vtb_cmax_camel
```

To run a unit testbench, substitute its file and module name.
