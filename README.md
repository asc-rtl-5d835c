# ASC-CBR: adaptive-scale feature-map compression in hardware

A deep-learning accelerator spends much of its memory bandwidth moving
feature maps (the activations between layers) to and from DRAM. This codec
compresses those feature maps on the way out and expands them on the way back,
at a **fixed compression rate** and **one value per clock cycle**. It can be
widened to many values per cycle.

The scheme is a texture-compression idea carried over to activations. The
feature map is cut into small blocks of values from one channel neighbourhood,
for example 8 or 16 values. Each block is stored as:

* one or two **endpoints**: the block's minimum and maximum, at full precision;
* one **3-bit index** per value, naming the nearest of eight **interpolation
  points** placed between the endpoints.

Two families of interpolation points are available. Each block uses the one
that reconstructs it better:

* **revised linear**: points spread evenly between min and max. This suits
  blocks whose values are spread out.
* **log-linear**: points bunched near the minimum, with a few far apart.
  This suits blocks of small values with one or two outliers, which is common
  after ReLU.

The encoder works out both, sums the L1 error of each over the block, and
keeps the better one. It tells the decoder which one it kept through the
*order* of the two endpoints, so selecting the scale costs no extra bit.

With a known block size and endpoint count the compressed size never changes:

    rate = (block_size * W) / (endpoints * W + 3 * block_size)

| data  | (endpoints, block size) | rate  |
|-------|-------------------------|-------|
| INT8  | (1, 8) or (2, 16)       | 2.0   |
| INT8  | (1, 16)                 | 2.285 |
| INT8  | (1, 32)                 | 2.461 |
| INT16 | (1, 8) or (2, 16)       | 3.2   |
| INT16 | (1, 16) or (2, 32)      | 4.0   |

Because the rate is fixed, the accelerator can place every compressed block at
a known address.

## The interpolation points and why the hardware is cheap

Let `R = max - min` be the range of the block. Each point is a fraction of
`R` with a power-of-two denominator, so it costs a shift rather than a divider.
The "revised" linear scale puts its last step at 2/8 instead of 1/7 for exactly
this reason. All arithmetic works on the *shifted* value `x - min`. As a result:

* the points and thresholds depend on `R` alone, never on `min`;
* both scales can share one set of multiples of `R`.

Points `v0..v7`, as fractions of R:

| index      | 0 | 1    | 2    | 3    | 4   | 5   | 6   | 7 |
|------------|---|------|------|------|-----|-----|-----|---|
| linear     | 0 | 1/8  | 2/8  | 3/8  | 4/8 | 5/8 | 6/8 | 1 |
| log-linear | 0 | 1/32 | 1/16 | 3/32 | 1/8 | 1/4 | 1/2 | 1 |

The nearest point is found without computing any distances. Seven
**thresholds**, the midpoints between neighbouring points, are compared with
`x - min`. A priority encoder then returns the highest threshold that `x - min` strictly exceeds:

| threshold  | 1    | 2    | 3    | 4    | 5    | 6     | 7    |
|------------|------|------|------|------|------|-------|------|
| linear     | 1/16 | 3/16 | 5/16 | 7/16 | 9/16 | 11/16 | 7/8  |
| log-linear | 1/64 | 3/64 | 5/64 | 7/64 | 3/16 | 3/8   | 3/4  |

Every number in both tables is `k*R >> s` with `k` from {1, 3, 5, 7, 9, 11}.
The encoder's interpolation unit therefore needs only:

* one subtractor for `R`;
* adders for `3R, 5R, 7R, 9R, 11R`;
* per value: seven comparators per scale, a priority encoder and an 8:1 mux.

The decoder needs only `R`, `3R` and `5R`, six 2:1 muxes that pick a scale's
points, and one 8:1 mux per value.

All shifts truncate (floor). The reference model in `tb/asc_ref_pkg.sv`
computes the same fractions by integer division, and the testbenches require
the hardware to agree with it exactly.

**Example.** Take a block with min = -20 and max = 100, so R = 120.

* Linear points (shifted): 0, 15, 30, 45, 60, 75, 90, 120.
* Linear thresholds: 7, 22, 37, 52, 67, 82, 105.
* The value 30 shifts to 50. That is above 37 and not above 52, so its index
  is 3. It decodes to 45 + (-20) = 25.

## Endpoint modes and the compressed format

A block is sent as `endpoint1, endpoint2, index0, index1, ...`, with the
indices in input order.

* **Two-endpoint mode.**
  * Linear scale: endpoint1 = min, endpoint2 = max.
  * Log-linear scale: endpoint1 = max, endpoint2 = min.
  * The decoder reads `endpoint1 <= endpoint2` as linear.
  * A constant block (min = max) has equal losses on both scales. The encoder
    picks linear, and the decoder reads it as linear too.
* **One-endpoint mode**, for layers that are mostly ReLU output.
  * The block minimum is taken as 0, and only one endpoint is stored.
  * Values below 0 are reconstructed as 0, and a block that is entirely
    negative becomes all zeros (max clamped to 0).
  * The scale is signalled by the sign of the single endpoint: `-max` for
    linear, `+max` for log-linear. This is the two-endpoint rule with an
    implicit endpoint2 of 0.

The endpoint mode and the block size are meant to be fixed per model. In this
RTL the encoder samples them on the first beat of each block
(`enc_cfg_one_ep`, `enc_cfg_blk_log2`), so they may change from block to block.
The decoder's mode is a level input, `dec_one_ep`.

## Encoder organisation (`asc_encoder`)

The first index of a block cannot be chosen until the last value of that
block has been seen (for the endpoints), and then until every value has been
interpolated (for the losses). The encoder is therefore three overlapped
stages. Each stage works on a different block:

1. **Endpoint search** (`asc_endpoint_search`). A running max/min register
   pair watches the input beats. Each beat is also written into the **input
   queue**.
2. **Interpolation.** This stage starts once a block's endpoints are known.
   * The block is read back out of the input queue.
   * `asc_enc_interp` gives each value's index and shifted point on both
     scales.
   * `asc_loss_acc` sums `|x - point|` per scale.
   * Both indices are written into the **linear** and **log-linear index
     queues**.
3. **Output.** The loss comparison picks a scale.
   * That scale's queue is read out as the index stream; the other queue is
     read in step and the data dropped.
   * The endpoints go out in the order that encodes the scale.

Small descriptor FIFOs carry each block's mode, size, endpoints and chosen
scale from stage to stage. A stage takes the next block as soon as it finishes
the current one, so blocks of different sizes can be mixed freely.

**Timing (LANES = 1).**

* Throughput is one value per cycle, indefinitely. Blocks of equal size come
  out back to back.
* When nothing is queued ahead, a block's first output beat leaves `N + 6`
  cycles after its last input beat (`N` = beats per block).
* A small block that follows a larger one waits behind it. The delay lasts
  until the input pauses.

**No back-pressure.** The output stream must always be accepted. The queues
hold two largest blocks (at least 8 beats), and no queue can overflow under
any input pattern: occupancy stays at most one largest block plus 4 beats.
Assertions in the RTL check this.

The `out_scale_log` output is for observation only; the stream itself carries
the scale.

## Decoder organisation (`asc_decoder`)

The decoder works out the scale, max and min from the endpoints of a block's
first beat and keeps them for the rest of the block. It then:

1. forms the eight shifted points with `asc_dec_interp`;
2. adds `min` back to them once per block;
3. replaces each index with a point through one 8:1 mux per lane.

Output is registered, so the latency is one cycle and throughput is one beat
per cycle.

## Scaling to more values per cycle (`LANES`)

`LANES` values enter per cycle (LANES must be a power of two). Only the parts
that touch individual values are replicated:

* **Endpoint search:** a max/min tree, pipelined by one register.
* **Loss accumulator:** an adder tree, pipelined by one register.
* **Queues:** widened by LANES and shortened by the same factor.
* **Interpolation:** comparators, priority encoders and muxes are copied per
  lane. The range multiples, thresholds and points are shared.
* **Decoder:** only the final mux is copied.

Blocks must be at least one beat long, so `cfg_blk_log2 >= log2(LANES)`.
With LANES > 1 the encoder latency is `N + 8` cycles. LANES = 32 gives 32
values per cycle, which at 1.6 GHz is 51.2 G values/s, the bandwidth of a
DDR5-6400 channel.

## Parameters

| parameter      | default | meaning |
|----------------|---------|---------|
| `W`            | 8       | data width, two's complement integers (16 for INT16) |
| `LANES`        | 1       | values per cycle (32 for the wide version) |
| `MAX_BLK_LOG2` | 5       | largest block is 2^5 = 32 values; sets the queue depths |

Loss registers are `W + 2 + MAX_BLK_LOG2` bits wide, so they cannot overflow.

## Where this RTL goes beyond, or departs from, the published description

These points are this design's own choices. The published description leaves
them open:

* rounding by truncation;
* equal losses choose the linear scale;
* how one-endpoint mode signals the scale, and the clamp of an all-negative
  block;
* the decoder adds `min` once per block to the eight points;
* the stream interface (valid, first, last, no back-pressure);
* the run-time block size;
* the descriptor FIFOs;
* the asynchronous active-low reset;
* the queue depths.

Not built:

* **The variable-bitrate variant**, which codes zero values with a bit mask
  and the rest with this codec. Its grouping of non-zero values into blocks
  and its stream format are not specified.
* **Floating-point data.**
* **Channel reordering and block tiling.** These happen offline or in the
  accelerator's addressing before values reach the encoder.

Blocks of 64 values need `MAX_BLK_LOG2 = 6`.

## Files

* `rtl/`, synthesizable:
  * `asc_pkg`: shared constants;
  * `asc_queue`: FIFO;
  * `asc_prio_enc`: 7-input priority encoder;
  * `asc_endpoint_search`, `asc_enc_interp`, `asc_loss_acc`: encoder units;
  * `asc_encoder`: the encoder;
  * `asc_dec_interp`, `asc_decoder`: decoder units and the decoder;
  * `asc_codec`: top level, one encoder and one decoder.
* `tb/` holds:
  * a reference model (`asc_ref_pkg`), written from the fractions above
    rather than from the shifts;
  * a block generator (`asc_blockgen_pkg`), which makes uniform, smooth,
    outlier, constant, ReLU-like and all-negative blocks;
  * a testbench per unit;
  * two end-to-end benches.

Every testbench compares against the reference model, has a watchdog, and
ends with a `TB_RESULT checks=<n> failures=<n>` line.

* `tb_asc_codec` runs the top at its default parameters. It loops the encoder
  into the decoder over more than 800 blocks, in phases of fixed mode, and
  checks every index, endpoint and decoded value, the rate formula, the
  `N + 6` latency, one value per cycle, and the decoder's one-cycle latency.
  It also fails unless each of these has happened at least once:
  * both scales, both endpoint modes and every block size 2..32;
  * a loss tie and an all-negative clamp;
  * a block queued behind a larger one;
  * input bubbles.
* `tb_asc_codec_workloads` runs the configurations the evaluated models use:
  * INT8 with (1, 16) and (1, 32);
  * INT16 with (1, 8), (1, 16), (2, 16) and (2, 32);
  * the 32-lane INT8 and INT16 versions.
* `tb_asc_encoder` mixes block sizes at random, with and without bubbles, at
  1 and 4 lanes.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/asc_pkg.sv tb/tb_asc_codec.sv --top-module tb_asc_codec -o sim
    ./obj_dir/sim

Substitute any other `tb_*` module name to run that bench. Each bench runs in
well under a second.
