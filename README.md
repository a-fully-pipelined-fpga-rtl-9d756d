# A pipelined SIFT descriptor matcher: one cosine-angle comparison per clock

Two images are described by SIFT keypoint descriptors. Each descriptor is a
128-element vector of 16-bit values with unit length, plus the (x, y) position
of its keypoint. To find which keypoints of a query image alpha also appear in
a database image beta, each alpha descriptor is compared with every beta
descriptor. The comparison keeps the nearest and second-nearest neighbours. A
pair counts as a match when the nearest is clearly closer than the runner-up
(Lowe's ratio test).

This core measures distance as the angle between two unit vectors,
`theta = arccos(alpha . beta)`. Euclidean distance would need 128
subtractions, squares and a square root. The angle needs one dot product and
one arccos per pair. The arithmetic is one deep pipeline that takes in a new
(alpha, beta) pair every clock cycle. It has:

* 128 multipliers;
* a 7-level adder tree;
* an arccos unit made from a square root and a CORDIC;
* a min/second-min tracker;
* a shift-and-add ratio test.

The hard part of the design is not the arithmetic. It is keeping that pipeline
fed from a memory that delivers only 64 bits per cycle, when one descriptor
holds 2080 bits. The next two sections explain how, and what this costs in
ordering and timing.

## Why the pipeline stays full: the 33-descriptor cache

At 8 bytes per clock, a 2080-bit descriptor takes 33 cycles to arrive. A
design that streamed both operands would compute one dot product every 33
cycles. Instead, the core caches a block of up to 33 alpha descriptors in
`DES_MEM`, 33 × 2080 bits. It then streams the beta image past the block:

```
for each alpha block (33 descriptors, the last one may be shorter):
    load the block into DES_MEM
    for each beta descriptor b (arrives over 33 cycles):
        for slot j = 0 .. 32:            -- one per clock
            angle = arccos(DES_MEM[j] . b)
            update (min, sec_min, location) of slot j in MIN_MEM
    for slot j: ratio test on MIN_MEM[j] -> one result per alpha descriptor
```

A block of 33 is exactly as long as one beta descriptor's transfer. So while
beta descriptor k is compared with the 33 cached alphas, descriptor k+1 is
already arriving. This needs a beta FIFO of only 2 entries. The dot-product
pipeline then runs at full rate for as long as the memory keeps up. A job
takes about

    ceil(num_alpha / 33) * num_beta * 33 cycles

plus the first block load and the pipeline depth. Note that the beta image is
streamed once for each alpha block.

The second cache, `MIN_MEM`, holds 33 words of 64 bits. Each word is the
running `{min, sec_min, location}` of one cached alpha descriptor. For the
first beta descriptor of a block, a multiplexer in front of `MIN_FIND` passes
the constant 2^64−1 instead of the stale word. This "flushes" the cache
without spending any cycles on it. With the last beta descriptor of a block,
the word is final and goes on to the ratio test.

While the last beta descriptor of a block is being swept, each `DES_MEM` slot
is refilled with the next block as soon as it has been read for the last time.
`DES_MEM` is read-first, so a slot can be read and rewritten in the same
cycle. Refill and compute therefore overlap, and consecutive blocks follow
each other with no gap when the alpha stream keeps pace.

## Pipeline and timing

A pair is issued in stage S0: the DES_MEM read address goes out, and the beta
Register loads. From there:

| stage | unit | cycles |
|---|---|---|
| S1 | DES_MEM read data, beta Register | 1 |
| `dot_product` | 3 multiplier stages + 7 adder-tree levels | 10 |
| `cosine_inverse` | x² (3), 1−x² (1), square root (37), CORDIC (11) | 52 |
| `min_find` | Algorithm-2 update, registered | 1 |
| `min_mem` | write, with write-port read-back | 1 |
| `match_check` | shift/add/compare | 3 |

`match_valid` comes 68 cycles after the issue of the last beta descriptor of a
block for that alpha slot. `done` pulses one cycle after the last result.

MIN_MEM is a read-modify-write loop: read in the cycle before MIN_FIND, write
one cycle after. Two updates of the same slot are a whole sweep apart (33
cycles), so the loop needs no forwarding. Sweeps shorter than three slots can
happen when `block_size` < 3. The control unit pads them with empty slots
(`valid = 0`) to keep the loop hazard-free. With 33-descriptor blocks this
never happens.

Beside the data, a tag `{valid, aidx, first, last}` and the two keypoint
locations travel on shift-register delay lines (`shift_delay`). The tag
delivers the MIN_MEM read address, the write address, the flush select and
the "final result" strobe, each at the right stage. Nothing else in the
pipeline has to know the schedule.

## Number formats

| quantity | format | note |
|---|---|---|
| descriptor element | unsigned Q1.15 (1.0 = 0x8000) | values 0..1 |
| dot product | unsigned Q2.30, saturated to 32 bits | full-precision tree, 39 bits inside |
| x inside arccos | Q1.23, clamped to 1.0 | see below |
| 1 − x² | Q2.46 | 48-bit radicand |
| √(1 − x²) | Q1.23 | restoring square root |
| angle | unsigned Q1.15 radians, 0..51472 (π/2) | 16 bits |
| location | `{x[15:0], y[15:0]}` | 32 bits |

A packed descriptor has element i in bits `[16i+15:16i]` and the location in
`[2079:2048]`. Stream beats are little-endian: beat k carries bits
`[64k+63:64k]`, and the upper half of beat 33 is ignored.

The arccos is computed as `atan2(√(1−x²), x)` by an 11-iteration vectoring
CORDIC. The CORDIC's x input (`u`) is delayed 41 cycles so that it meets the
square root's output. Inside the unit, x is kept at 24 bits rather than 16.
The reason is that near x = 1, where the best matches lie, the slope of
arccos is steep: 16-bit x already gives errors of up to about 8·10⁻³ rad.
With 24 bits the total error is under 3·10⁻³ rad, dominated by the 11 CORDIC
iterations.

The ratio test is `min·32 < sec_min·19`, i.e. `min < 0.59375·sec_min`. The
constant 0.6 is rounded to binary 0.10011. The right side is built from
`sec<<4 + sec<<1 + sec` with two adders over three pipeline stages. No
multiplier is used.

## Blocks

| module | what it is |
|---|---|
| `sift_pkg` | widths, latencies, `min_entry_t` (64-bit MIN_MEM word), `tag_t` |
| `desc_assembler` | 33 × 64-bit beats → one 2080-bit descriptor, no bubbles |
| `desc_fifo` | first-word-fall-through FIFO of whole descriptors (33 for alpha, 2 for beta) |
| `des_mem` | 33 × 2080 descriptor cache, synchronous read-first |
| `dot_product` | 128 multipliers + 7-level adder tree, 10 cycles |
| `square_root` | restoring digit-by-digit root, padded to 37 cycles |
| `polar_sys` | vectoring CORDIC, angle of (u, v), 11 cycles |
| `cosine_inverse` | arccos from the two above, 52 cycles |
| `min_find` | min / second-min update (Algorithm 2), 1 cycle |
| `min_mem` | 33 × 64 minimum cache with write-port read-back |
| `match_check` | ratio test, 3 cycles |
| `shift_delay` | the Z⁻ⁿ delay lines |
| `control_unit` | block load, sweep issue, refill overlap, stall, drain, done |
| `sift_match_core` | the top: everything above wired as one core |

## Using the core

1. Pulse `start` while `busy` is low. Present `num_alpha` and `num_beta`
   (16 bits each, at least 1) and `block_size` (1..33; 33 is the intended
   value).
2. Stream the alpha image once on `a_beat_*`.
3. Stream the beta image `ceil(num_alpha / block_size)` times on `b_beat_*`.
   Both are valid/ready streams. A source that falls behind only stalls the
   core; nothing is lost.
4. There is one `match_valid` pulse per alpha descriptor, in alpha order. It
   carries:
   * `match`;
   * the alpha location `alpha_xy`;
   * `min_angle` and `sec_angle`;
   * `beta_xy`, explained below.

`beta_xy` is the location of the beta descriptor whose comparison produced
this result, which is the last beta descriptor of the sweep. It is *not* the
location of the nearest beta descriptor. The location that `MIN_MEM` keeps
with the minimum is the alpha location that rides along the angle path. The
beta location runs along its own delay line straight to the output. This
follows the data paths as they are drawn for the original design. If you need
the index or location of the best beta match, widen the MIN_MEM word and send
the beta location (instead of the alpha one) into `min_find`. The logic
already replaces the location whenever a new minimum is found.

Reset (`rst_n`) is asynchronous and active-low. It clears control state and
the valid bits of the tag pipelines. Data registers and memories are not
reset; nothing reads them before they are written.

## Where this departs from the described design

* **Block size 33, not 32.** One part of the original description speaks of
  blocks of 32 descriptors. The architecture itself, and the 8-byte-per-cycle
  arithmetic, use 33. This RTL uses 33.
* **Two stream ports.** The original has one DMA-fed descriptor stream feeding
  both FIFOs. Here each image has its own 64-bit port. The AXI DMA, the
  AXI4-Lite control registers and the processor/DDR side are not part of this
  RTL. The job parameters are plain ports.
* **Run-time inputs.** The job is described by descriptor counts and a block
  size, and the last block may be partial. The original speaks of "number of
  blocks" and "descriptors per block".
* **Vendor cores replaced.** The square root and the CORDIC were vendor IP.
  Here they are written out: a restoring square root and an 11-stage CORDIC.
  Both keep the original latencies, 37 and 11.
* **Internal precision.** Internal widths (Q1.23 for x, the 48-bit radicand)
  are this design's choice. Only the 32-bit dot product and the 16-bit angle
  are given.
* **Observability.** `min_angle` and `sec_angle` are extra outputs.

## Checking it

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/sift_ref_pkg.sv` holds
the reference model:

* random unit descriptors, and noisy copies of them for true matches;
* a bit-exact model of the arccos datapath;
* a real-valued arccos for accuracy bounds.

| testbench | what it checks |
|---|---|
| `tb_sift_match_core` | whole core at default parameters. Three jobs: 70 × 40, 40 × 36 with random gaps in both streams, and 5 × 4 with block size 2. Every result is compared with the reference (min, sec_min, match, locations), plus the cycle count. It also counts that flushes, refill overlaps, stalls, short blocks, padded sweeps, back-pressure, matches and non-matches each happened. |
| `tb_workloads` | the four image sizes 579, 638, 882 and 1021 descriptors against a 1021-descriptor database, with planted matches. It reports the run time: 6.076, 6.749, 9.108 and 10.456 ms at 100 MHz. |
| `tb_control_unit` | schedule of six jobs against an independent issue model, including stalls and partial blocks |
| the others | each unit against its own model, including its latency |

Simulate one with plain verilator. Packages come first:

```
verilator --binary --timing -Wno-fatal --top-module tb_sift_match_core \
    rtl/sift_pkg.sv tb/sift_ref_pkg.sv $(ls rtl/*.sv | grep -v sift_pkg) \
    tb/tb_sift_match_core.sv
./obj_dir/Vtb_sift_match_core
```

Unit testbenches are built the same way with only the modules they use.
`tb_sift_match_core` builds in a few seconds and runs in under one.
`tb_workloads` performs 3.2 million checks in about 20 s.

## Limits

* The matched beta descriptor is not identified (see `beta_xy` above).
* One comparison per clock: throughput is bound by the beta stream, which is
  re-read for every alpha block.
* Angles carry up to about 3·10⁻³ rad of error. Pairs whose ratio lies within
  that distance of 0.59375 may be decided differently than in floating point.
* Descriptors are assumed to be normalised to unit length. A dot product above
  1.0 is clamped to 1.0, giving an angle of 0.
