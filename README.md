# A composable streaming anomaly-detection fabric in SystemVerilog

Streaming anomaly detectors give each arriving sample a score that says how
unusual it is next to a sliding window of recent samples. No single
detector does best on every data set. Ensembles of many cheap, randomised
sub-detectors are more reliable than one large model, and mixing detector
*kinds* sometimes helps further. The fSEAD fabric builds this in FPGA
logic:

* **Seven detector partitions.** Each one holds an ensemble of a single
  detector kind (Loda, RS-Hash or xStream) and can be reloaded with another
  kind at run time.
* **Three combination partitions.** Each one merges up to four score
  streams.
* **Two stream switches.** They join the partitions, so the same silicon
  can be one of two things:
  * up to seven independent detectors on seven data streams;
  * one large ensemble that mixes kinds, or anything in between.

This RTL rebuilds that fabric in synthesizable SystemVerilog, down to the
arithmetic of each sub-detector. The sections below run from the smallest
parts to the top: the numbers, the three sub-detectors, the ensemble
wrapper, the fabric, how to configure it, and how it was verified.

## 1. Numbers on the wire and inside

Samples and scores travel as IEEE-754 single-precision floats on 32-bit
streams. A stream beat is `axis_beat_t` = {`data`, `user`, `last`}:

* `data` carries the value.
* `user` carries the anomaly label (0 normal, 1 anomaly) on score streams.
* `last` ends a packet.

Inside a partition every value is signed Q16.16 fixed point: 16 integer
bits and 16 fraction bits. Two converters sit at the edges:

* `f32_to_q16` floors, wraps values that overflow, and maps zero and
  denormals to 0.
* `q16_to_f32` is exact except that it drops mantissa bits below 2^-23 of
  the leading one, which truncates towards zero.

Fixed-point products are rounded towards minus infinity, as is `floor`.

Every score uses logarithms of small integer counts. `log2_lut` is a
constant table of log2(i) for i = 0 … DEPTH−1, built at elaboration by a
constant function. The function computes 16 fraction bits by repeated
squaring, so the table is not a file; entry 0 is defined as 0.

## 2. Sub-detectors

A sub-detector takes a whole feature vector `x` (D values) and returns one
score. All three kinds share a structure:

1. a projection step;
2. a discretisation into a bin or hash code;
3. a **sliding window** that counts how many of the last W samples landed
   in the same bin;
4. a score that falls as that count rises.

Each kind has its own parameter memory, which the host writes through the
configuration bus. That memory holds the random projection vectors, offsets
and hash seeds: the "different starting seed" that makes the R members of
an ensemble differ.

The sliding window (`sliding_window`) is shared by all three kinds. It
keeps, for each of `ROWS` rows:

* a ring of the last W codes;
* a count table with one counter per code.

On an update it writes the new code into the ring and increments its count.
Once the ring is full, it also evicts the code being overwritten and
decrements that code's count. A code that both enters and leaves in one
update keeps its count. The count it reports is the table entry for the
code *before* the insertion, so a sample is scored against the W samples
before it. Counts therefore stay in 0 … W. Reset empties the window.

### 2.1 Loda (`loda_subdetector`)

One random projection onto a line, followed by a one-dimensional histogram:

```
prj   = Σ_j x[j]·w[j]                              (D cycles, one MAC per cycle)
bin   = clamp(floor((prj − lmin)·lscale), 0, BINS−1)
c     = window count of bin
score = log2(W) − log2(max(c, 1))
```

`lscale` = BINS / (max − min) is stored as a reciprocal, so no divider is
needed. The score is the negative log-density of the histogram, −log2(c/W),
so rarely seen bins score high.

Parameter words: 0 … D−1 `w[j]`, D `lmin`, D+1 `lscale`.

`done` rises D+3 clock edges after `start`.

### 2.2 RS-Hash (`rshash_subdetector`)

Each feature is normalised with the ensemble-wide minimum and reciprocal
range. It is then shifted by a per-sub-detector random offset α and
quantised with a random grid width f:

```
key[j] = floor( ((x[j] − nmin[j])·nscale[j] + α[j]) · inv_f )
```

The D keys are absorbed, one per cycle, into CMS_W Jenkins one-at-a-time
hashes with seeds 1 … CMS_W. Each hash gives a code modulo MOD, which
indexes one row of a count-min sketch over the window:

```
score = −log2(1 + min_r c_r)
```

Projection and hashing are fused into one loop over the dimensions.

Parameter words: 0 … D−1 `α[j]`, D `inv_f`. `nmin` and `nscale` are shared
by the ensemble and live in the wrapper.

`done` rises D+2 edges after `start`.

### 2.3 xStream (`xstream_subdetector`)

A dense random projection to K dimensions, computed with K multiply-adds in
parallel, one input dimension per cycle. For each sketch row r the
projection is binned per dimension:

```
bin[r][k] = floor((prj[k] + shift[k]) · scale[r][k])
```

`scale[r][k]` carries the row's depth (2^depth / width). The K bins of a
row are hashed (Jenkins, seed r+1, one bin per cycle) to a code modulo MOD.
Row r's count is weighted by 2^(r+1) as in the half-space-chain score:

```
score = −log2(1 + min_r 2^(r+1)·c_r)
```

The log table is therefore (W << CMS_W) + 2 deep.

Parameter words: `pm[d][k]` at d·K+k, `shift[k]` at D·K+k, and
`scale[r][k]` at D·K+K+r·K+k.

`done` rises D+K+3 edges after `start`.

The binning is the simplest form of half-space binning that the score
formula needs. It is this design's own reading, because the source
describes binning only by reference to the original xStream.

## 3. The ensemble partition (`ad_ensemble`)

This is what one detector partition holds. The `KIND` parameter selects:

* `RM_LODA`, `RM_RSHASH` or `RM_XSTREAM`: a detector with R sub-detectors
  (defaults R = 35 / 25 / 20, the numbers that fit one partition);
* `RM_IDENTITY`: a pass-through module, to load into a partition that is
  not used.

The datapath is:

```
stream in ─ f32_to_q16 ─ windower ─ xreg ─┬─ sub-detector 0 ─┐
 (D beats per sample)    (D-deep shift    ├─ sub-detector 1 ─┤ score_average ─ > thr ─ out reg ─ stream out
                          register)       └─ …  R of them  ──┘     (Σ·1/R)     label         (1 beat/sample)
```

* The **windower** turns D single-feature beats into one vector. While the
  vector waits, it holds its input ready low.
* All R sub-detectors start together on the same latched vector and run in
  lock-step. The next vector starts only when every sub-detector is idle.
* Results are released (`ack`) only when the output register is free or
  draining. A stalled output therefore stalls the sub-detectors, then the
  windower, then the input stream, and nothing is lost.
* `score_average` multiplies the sum by round(2^32/R) and shifts right by
  32 bits. The result is within one LSB of the true mean.
* The label is `average > threshold`. The output beat's `last` copies the
  `last` of the sample's final feature.

A partition accepts a new sample about every max(D, latency + 1) cycles.
The sub-detector latency is D+3 for Loda, D+2 for RS-Hash and D+K+3 for
xStream, so xStream is the slowest kind at the default sizes.

## 4. The fabric (`fsead_top`)

```
 in[0..6] ─ DEC ─ RP-1..7 ─ DEC ─ RS ─► Switch-1 S0-6            Switch-1 M0-6 ─► out[0..6]
                                        Switch-1 M7-13 ─ RS ─► Switch-2 S0-6
                                        Switch-2 M0-11 ─ DEC ─► COMBO1..3 (4 inputs each)
                                        COMBO1..3 ─ DEC ─ RS ─► Switch-2 S7-9
                                        Switch-2 M12-14 ─ RS ─► Switch-1 S7-9
```

DEC is a decoupler and RS a register slice.

**Switches (`axis_switch`).** These are statically routed crossbars. Each
master (output) port has a register that names the slave (input) feeding
it, or disables it. A routed pair is a wire: no buffering and no added
cycle. If two enabled masters name the same slave, the lowest-numbered
master gets it and the other stays silent. An assertion checks that no
slave ever drives two masters, so routes are point-to-point.

Switch-1 has 10 slaves and 14 masters. Switch-2 has 10 slaves and 15
masters. The return link from Switch-2 to Switch-1 lets one combo feed
another combo (Switch-2 to itself) or reach an output channel.

**Register slices (`axis_reg_slice`).** Each one is a two-entry FIFO on
every partition-to-switch and switch-to-switch link. It breaks the
combinational ready/valid path between distant regions of the chip without
losing throughput: it sustains one beat per cycle under a steady stream.
Its latency is one cycle.

**Decouplers (`dfx_decoupler`).** One per partition. While a partition's
bit in the decouple register is set:

* its streams show valid and ready low on both sides;
* configuration writes to it are dropped;
* it is held in reset.

The fabric keeps running around it. A partition that holds no module yet
(an empty, power-saving default) behaves exactly like a decoupled one. On
release the partition starts empty:
windows cleared and threshold reset. Its parameter memories are not reset,
as they hold whatever was last written.

**Combination partitions (`combo`).** Each one joins the enabled inputs
(mask register): a beat is taken from all of them at once. It then
combines them:

* scores by average, maximum or weighted average Σ w_i·s_i / N;
* labels by OR or by majority vote (strictly more than half).

The result leaves one cycle after the join.

### Example topologies

| Use | Switch-1 routes | Switch-2 routes |
|---|---|---|
| Seven independent detectors | M*i* ← S*i*, *i* = 0…6 | all disabled |
| One mixed ensemble: RP-1..4 → COMBO1; COMBO1 + RP-5..7 → COMBO3 → out[0] | M7+*i* ← S*i* (*i* = 0…6), M0 ← S9 | M0-3 ← S0-3, M8 ← S7, M9-11 ← S4-6, M14 ← S9 |

The second row reproduces the heterogeneous configuration: two Loda, two
RS-Hash and three xStream partitions feeding one score. The default
`RP_KIND` builds exactly these kinds.

## 5. Configuration interface

One write per cycle on `cfg_valid`, `cfg_addr[19:0]` and `cfg_data[31:0]`.
`cfg_addr[19:16]` selects the block; `cfg_addr[15:0]` is the word within
it.

| Block | Words |
|---|---|
| 0-6 RP-1..7 | 0x0000 threshold (Q16.16) · 0x0100+j RS-Hash `nmin[j]` · 0x0200+j RS-Hash `nscale[j]` · 0x8000 \| r<<9 \| w: word w of sub-detector r (layouts in §2) |
| 7-9 COMBO1..3 | 0: [1:0] score method (0 avg, 1 max, 2 weighted), [2] label method (0 or, 1 vote) · 1: input mask · 2+i: weight i (Q16.16) |
| 10 Switch-1, 11 Switch-2 | word m: master m's source slave in [7:0], bit 31 disables |
| 12 decoupler | word 0 bit p: decouple partition p (0-6 RP-1..7, 7-9 COMBO1..3) |

The host computes the model parameters: projection vectors, bin ranges and
offsets. `decouple_status[9:0]` reports the decouple register, delayed by
one cycle.

## 6. Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `D` | 21 | features per sample (the Cardio data set) |
| `W` | 128 | sliding-window length |
| `BINS` | 20 | Loda histogram bins |
| `CMS_W` | 2 | count-min-sketch rows (RS-Hash, xStream) |
| `MOD` | 128 | hash range per sketch row |
| `K` | 20 | xStream projection size |
| `R_LODA`, `R_RSHASH`, `R_XSTREAM` | 35, 25, 20 | sub-detectors per partition |
| `RP_KIND[7]` | Loda, Loda, RS-Hash, RS-Hash, xStream ×3 | the module loaded in each partition |

Run-time reconfiguration is modelled by elaboration. Loading another
partial bitstream corresponds to another `RP_KIND`, which can also be
`RM_IDENTITY`. The paper's homogeneous configurations (seven Loda, seven
RS-Hash, seven xStream) and its other mixes are all `RP_KIND` choices. A
data set with fewer than D features can be sent zero-padded to D, or the
fabric can be built with a smaller `D`.

## 7. Where this RTL departs from the original or fills gaps

* **Fixed point and conversion.** Q16.16 is used throughout, and the
  streams carry float32. Rounding is floor everywhere. Scores can therefore
  differ from a floating-point model in the last bits. The log table has
  16 fraction bits.
* **Score formulas.** RS-Hash uses −log2(1 + min c). xStream uses
  −log2(1 + min 2^(r+1)·c_r), the tabulated closed form. The step-by-step
  listing of xStream writes a per-row log plus row offset instead; where
  the two disagree, the closed form was followed.
* **xStream binning** is built as described in §2.3. Its shift and scale
  values are the host's business.
* **Division.** It is replaced everywhere by stored reciprocals: bin
  scale, grid width, normalisation range, 1/R, and 1/N in the combo.
* **Lock-step ensemble control, interface timing, port numbering, address
  map and reset values** are this design's choices.
* **Weighted average** divides Σ w_i·s_i by N, as its formula is written,
  even though the weights are meant to sum to 1.
* **Not built.** Some parts are left out:
  * the DMA engines, the processor, the AXI-Lite interconnect and the
    bitstream loader. The DMA channels appear as the `in`/`out` stream
    ports and the interconnect as the `cfg_*` write bus.
  * the software generator that emits the ensembles.
* **Timing.** The original prototype closed timing at 188 MHz. This RTL
  has registered stream boundaries between partitions, but the Loda
  multiply-accumulate, the switch crossbars and the log table lookups were
  not pipelined for a particular clock.

The `log2_lut` table is a packed constant longer than 8192 bits. Verilator
warns about the replication width. The warning is harmless: the constant is
computed once at elaboration.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog. The
reference values are computed in the testbench from the formulas above, in
`real` arithmetic or bit-exact integer models (`tb_pkg`), not by reusing
the RTL. Highlights:

* Converters: random and corner values against a real-number model.
* `log2_lut`: every entry; powers of two exactly.
* `sliding_window`, `jenkins_hash`: against queue and integer models.
* Sub-detectors: full random models against a model of the same arithmetic,
  with the D+3 / D+2 / D+K+3 latency checked.
* `ad_ensemble`: a full Loda model. For RS-Hash and xStream, a repeated
  sample whose score is known whatever the random parameters. Identity
  pass-through. Output back-pressure at random.
* Switch, register slice, decoupler and combo: random traffic, random
  stalls, reconfiguration, conflicts, and full throughput.

`tb_fsead_top` runs the whole fabric at reduced size (D=3, W=8, two
sub-detectors per partition, K=4, MOD=16, BINS=4). It exercises:

* seven independent channels;
* the mixed cascade RP-1..4 → COMBO1 → COMBO3 → out[0];
* three applications at once: RP-1..3 → COMBO1 (average), RP-4,5 → COMBO2
  (maximum), RP-6,7 → COMBO3 (majority vote), to out[0..2];
* a losing master in a switch conflict;
* random output stalls;
* a decoupled partition that must stall its input and come back empty;
* both label values.

It counts each of these mechanisms and fails if one never happened.
Because every partition is fed the same sample over and over, the n-th
score is known exactly for any random parameters:

| Kind | Score of the n-th repeat |
|---|---|
| Loda | log2 W − log2 max(n, 1) |
| RS-Hash | −log2(1 + n) |
| xStream | −log2(1 + 2n) |

In each formula n is capped at W.

`tb_fsead_top_wide` is the same test with every sub-detector at its
default size (D = 21, W = 128, BINS = 20, MOD = 128, K = 20) and two
sub-detectors per partition. It is the largest configuration simulated end
to end. With all 35/25/20 sub-detectors per partition (180 in all), the
fabric elaborates and lints cleanly. Verilator's generated C++, however,
takes well over ten minutes to compile on a four-core machine, so that size
was not simulated. Only the ensemble count R differs between the two builds;
every sub-detector is the same circuit at either size.

To run one test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fsead_top \
    tb/tb_pkg.sv rtl/fsead_pkg.sv tb/tb_fsead_top.sv -y rtl -y tb -o sim
obj_dir/sim
```

The same command works for any `tb_<module>` and for `tb_fsead_top_wide`,
which takes about a minute to build and run.
