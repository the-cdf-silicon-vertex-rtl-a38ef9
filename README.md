# A silicon vertex trigger in SystemVerilog

A hadron-collider detector produces far more collisions than it can
record. To keep the rare events that contain long-lived particles, such as
b hadrons, the trigger has to measure, within a few tens of microseconds of
each collision, how far each charged track misses the beam line. That
distance is the impact parameter d. Measuring it needs the fine hits of the
silicon strip detector as well as the coarse tracks of the drift chamber.
Software takes on the order of 100 ms per event to do this.

This design does it in dedicated logic. It rests on three ideas:

* **Parallel slices.** The silicon detector has 12-fold symmetry in
  azimuth. Each 30° slice is handled by its own independent, data-driven
  pipeline.
* **Pattern recognition by associative memory.** Hits are reduced to
  coarse bins called superstrips. About 32K likely combinations of bins
  (patterns) are stored per slice. Every hit is compared against all of
  them at once, so finding candidate tracks takes time linear in the
  number of hits.
* **A linearised fit.** Within one pattern, the track parameters depend
  almost linearly on the hit positions. The fit is therefore a handful of
  8-bit multiply-accumulates around values precomputed for the pattern's
  edge.

The RTL covers the whole digital chain:

1. strip clustering;
2. pattern matching;
3. combination of hits into candidates;
4. track fitting;
5. merging of the slices;
6. final clean-up: duplicate removal, beam-offset correction, timing.

It also includes the monitoring features that run throughout the chain:
per-event parity, event-tag comparison, and spy memories on the cables
that can be frozen together.

## Data flow

```
                 one slice (svt_slice), x12
 30 strip cables -> 30 hit_finder --+
 XFT track cable -------------------+-> merger tree --+-> am_board ---- roads ---+
                                        (8 + 2 + 1)   |                          v
                                                      +-> hit_buffer (hits) -> candidates
                                                                                 |
                                                            track_fitter <-------+
                                                                 |
 12 slice track cables -> merger tree (3 + 1) -> cleanup -> output cable
```

Every arrow is an **SVT cable**. Spy buffers sit on these cables:

* in each slice: the AM board input, the roads, the candidates and the
  fitted tracks;
* around the clean-up stage: its input and its output.

## The SVT cable

Every connection between stages uses the same cable. A word is 23 bits
(`svt_pkg::svt_word_t`):

| bits | meaning |
|---|---|
| `data[20:0]` | payload |
| `ep` | end of packet: last word of a hit group, a candidate or a track |
| `ee` | end of event |

Handshake:

* The sender drives `valid` (the strobe).
* The receiver drives `hold`.
* A word moves on a rising clock edge where `valid && !hold`.
* The receiving FIFO (`svt_cable_rx`) raises `hold` while it is full, so no
  word is ever lost and every stage can stall its sender.

Each event ends with one EE word with this layout:

| bits | meaning |
|---|---|
| `data[7:0]` | event tag |
| `data[8]` | parity bit |

The parity bit is the XOR of all bits of the event's data words, EE word
excluded. It is recomputed by `svt_cable_tx` on every output and checked by
every receiver.

Payload layouts in this design:

| word | layout |
|---|---|
| strip | `{channel[19:8], pulse height[7:0]}` |
| silicon hit | `{layer[20:18], barrel[17:15], centroid[14:0]}`, centroid in 1/8 strip |
| XFT track | `{3'd5, 1'b0, curvature[16:11] signed, phi[10:0]}` |
| road | `{pattern ID[14:0]}`, pattern ID = chip·128 + address |
| candidate | road, XFT, hit L0..L3 (EP on the last), as six words |
| fitted track | w0 `{wedge[3:0], XFT c, XFT phi}`; w1 `{c[9:0], phi[10:0]}`; w2 `{d[10:0], chi2[9:0]}` |
| timing | one-word packet, `[19:0]` = cycles from Level-1 accept to end of event |

## Stage by stage

### Hit finder (`hit_finder`)

There is one hit finder per silicon plane: 12 × 6 × 5 = 360 in all. Each
one takes the plane's sparsified list of strip words in increasing channel
order, one per clock.

* A strip joins a cluster when its pulse height is at least the
  programmable threshold and is non-zero.
* A cluster is adjacent channels, up to `MAX_WIDTH` = 8 strips.
* When a cluster closes, one hit word carries its centroid,
  8·Σ(ch·ph)/Σ(ph), in 1/8 of a strip.

### Superstrips (`ss_compute`)

A hit becomes (AM layer, superstrip) as follows:

* The superstrip is `bin = coord * recip >> 16`, where
  `recip = 65536 / bin width` is programmed per layer. Any width can be set
  without a divider.
* The superstrip number also includes the barrel number.
* A layer-use mask and a layer map choose four of the five silicon layers.
* The XFT track fills AM layer 0; the four chosen silicon layers fill
  layers 1 to 4. The track is first projected to the
  outer silicon radius by a linear correction,
  `phi + (c * swim_k) >>> 4`, and then binned the same way.

The AM board and the hit buffer both use this same function, so their bins
always agree.

### Associative memory (`am_chip`, `am_board`)

Each `am_chip` holds 128 patterns of five superstrips.

* Every binned hit is compared with all patterns in the same clock. A
  match sets that layer's bit in the pattern's hit mask.
* At end of event the chip latches the set of patterns whose mask is full
  and clears the masks.
* A priority encoder then hands out the matched addresses one by one.

The `am_board` holds 256 chips (32K patterns).

* It broadcasts one hit per clock.
* It then reads out the roads, lowest chip first, at one per clock.
* Its time is therefore (hits + matched roads + 2) cycles per event.

### Hit buffer (`hit_buffer`)

A road says only which superstrips matched. The fitter needs the actual
hits. The hit buffer bridges this gap.

* While the event's hits stream in, it files each hit into a bucket keyed
  by (AM layer, superstrip). There are up to `MAXH` = 4 hits per bucket;
  extra hits set `overflow`.
* For each road it reads the road's five superstrips from its own copy of
  the pattern bank.
* An odometer then walks every combination of one hit per layer and sends
  one six-word candidate per combination.
* At end of event all buckets are emptied in one cycle.

### Track fitter (`track_fitter`, `fit_unit`)

For the six coordinates x = (c_XFT, phi_XFT, h0..h3) the fit needs:

* the track parameters p = (c, phi, d) = p0 + V·x;
* the three constraints χ = χ0 + C·x, and χ² = |χ|².

The fitter does not use x directly. For each pattern it stores:

* the pattern's edge coordinates x_e;
* the values p_e and χ_e already evaluated at that edge.

The fitter then computes only corrections:

```
dx_i = clip(x_i - x_e,i, 0, 255)                       (8 bits unsigned)
p_j  = p_e,j  + (sum_i V_ji * dx_i) >>> shift          (V_ji 8 bits signed)
chi_k= chi_e,k + (sum_i C_ki * dx_i) >>> shift
chi2 = sum_k clip(chi_k, +-4095)^2
```

Six `fit_unit`s (one per row of V and C) each do six serial 8×8
multiply-accumulates. The schedule is fixed at exactly 10 clock cycles per
track:

* 1 cycle for the constant lookup;
* 6 cycles of multiply-accumulate;
* χ² and the cut;
* a finishing cycle that overlaps the next start.

At 40 MHz that is 250 ns per track. A track with `chi2 <= chi2_max` is sent
as three words, tagged with its slice number. The per-pattern constants
(the flash memory of the real system) are loaded through `const_we`.

### Merging (`merger`)

The merger is the general-purpose fan-in and fan-out unit: up to four
inputs and two identical outputs.

* For each event it copies the enabled inputs' data, lowest input first,
  and then sends one EE word.
* It compares the event tags of all inputs. A mismatch pulses `tag_err`.
* Each input's parity is checked.

Each slice uses a tree of eleven mergers (8 + 2 + 1) to bring 30 hit streams
and the XFT stream to one cable. The last merger's two outputs feed the AM
board and the hit buffer with identical data. Four more mergers (3 + 1)
join the twelve slices.

### Clean-up (`cleanup`)

The clean-up stage does three things.

* **Duplicate removal.** Tracks sharing the same first word (same slice and
  XFT track) are duplicates. Only the one with the smallest χ² is kept, so
  at most one track leaves per XFT track. A table holds the event's tracks
  (`MAXTRK` = 64). `ghost` pulses for each dropped duplicate.
* **Beam offset.** The beam-line position (bx, by) comes from a host
  register. It is subtracted as `d' = d - (bx·sinφ - by·cosφ) >>> 14`. The
  sine table has 768 entries at 1.14 fixed point. It is computed during
  elaboration by a constant function (an integer Taylor series), so no data
  file is needed.
* **Timing.** The stage appends a timing word with the cycles from the
  event's Level-1 accept to its end. Accept times wait in a 4-deep FIFO,
  one entry per front-end event buffer.

### Spy buffers and the error line (`spy_buffer`, `svt_top`)

A spy buffer sits on a cable without adding delay. It records the last
`DEPTH` = 100 000 words in a circular memory. On `freeze` it stops
recording, and the host can read it through a separate port while data
keep flowing.

In source mode the host loads a pattern and the buffer plays it onto the
cable, at one word every two cycles and respecting `hold`. Every board can
therefore be fed test data and observed in the running system.

In `svt_top`:

* every tag or parity error sets a sticky `error_line`;
* `error_line` or `host_freeze` freezes all 50 buffers at once;
* `err_clear` releases them;
* the host selects a buffer with `spy_sel`: slice·4 + k for a slice buffer,
  48 and 49 for the clean-up input and output.

## What is from the source and what is not

These parts follow the published description of the system:

* the 12-slice, 360-plane structure;
* 256 AM chips of 128 five-layer patterns per slice, with parallel hit
  masks and a priority encoder;
* four-of-five silicon layers plus the XFT track;
* programmable bin widths and the XFT swim;
* the fit around pattern-edge values with 8-bit multiplications in six
  parallel units, at 250 ns per track;
* goodness-of-fit cuts;
* 4-in / 2-out mergers with event-tag comparison;
* per-event parity;
* 10^5-word spy buffers that freeze together and also act as sources;
* the clean-up stage, including ghost removal, beam-offset subtraction and
  timing.

These are this design's own choices, because the description does not
give them:

* all word layouts and field widths;
* the clustering rule;
* the reciprocal-multiply binning and the linear swim;
* the hit buffer's buckets and odometer, and its limit of 4 hits per
  superstrip;
* the dx clipping and χ clipping in the fit;
* the choice of the lowest χ² among duplicates;
* the form of the beam correction and its sign;
* the merger tree shapes, the host port and the spy placement.

The clock frequency is not given. 40 MHz is assumed so that the 10-cycle
fit equals 250 ns.

The following are outside the RTL:

* **Optical links, cable drivers and control CPUs.** The 144 optical
  links, the LVDS cable drivers and the VME control CPUs are not modelled.
  Strip data enter as cables, and host access is plain ports.
* **Drift-chamber track finder.** Its tracks arrive already split per
  slice.
* **Beam-line fit.** It runs in software; its result enters as `beam_x` and
  `beam_y`.
* **Pattern sets and fit coefficients.** In the real system they come from
  Monte Carlo studies. The testbenches use small synthetic ones.

Limits to be aware of:

* A superstrip with more than 4 hits loses the rest (`hb_overflow`).
* An event with more than 64 distinct tracks at the clean-up stage sets
  `trk_overflow`.
* In the original system every cable has a spy memory at each end. Here
  there is one buffer per cable, and only on the cables listed under Data
  flow. The two ends of a cable in this RTL always carry the same words, so
  a second buffer would record nothing new. The cables from the hit finders
  and the slice merger tree have no buffer.
* The beam position used for the correction is not copied into the output
  event. The original system also recorded it with the event data.
* Events are processed one at a time per stage. A stage may start the next
  event only when its predecessor delivers it.

## Parameters

Defaults are the full system's sizes:

| module | parameter | default |
|---|---|---|
| `svt_top` | `NSL` | 12 |
| `svt_top` | `NPLANES` | 30 |
| `svt_top` | `NCHIPS` | 256 |
| `svt_top` | `NPATT` | 128 |
| `svt_top` | `SPY_DEPTH` | 100 000 |
| `svt_slice`, `track_fitter`, `hit_buffer` | `NROADS` | 32 768 |
| `hit_buffer` | `MAXH` | 4 |
| `cleanup` | `MAXTRK` | 64 |

FIFOs are 16 words deep. Shared widths and types are in `rtl/svt_pkg.sv`.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. The full
system testbench is `tb/tb_svt_top.sv`. Every testbench ends by printing
`TB_RESULT checks=N failures=M`.

Build and run a testbench with plain Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/svt_pkg.sv tb/tb_merger.sv --top-module tb_merger
./obj_dir/Vtb_merger
```

Most block testbenches shrink their block for speed, for example 4 AM
chips of 8 patterns. `tb_svt_top` runs the whole system at the default
sizes: 12 slices, 360 hit finders, 3072 AM chips and 50 spy buffers of
100 000 words. Building it takes a few minutes.

It loads a small pattern set and constants and sends several events. It
checks the words and fields of each output track, and counts each
mechanism:

* back-pressure stalls;
* ghost removal;
* fits, and rejections by the χ² cut;
* a deliberate event-tag mismatch raising the error line and freezing the
  buffers;
* spy-buffer readback.

Helper modules in `tb/`:

* `cable_source` drives a cable with random gaps.
* `cable_sink` collects a cable with random `hold`.
