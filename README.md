# P3NetCore: an FPGA core for learned 2D path planning

P3NetCore speeds up a neural path planner. The planner is given a cloud of
obstacle points, a start c_s and a goal c_g. It returns a collision-free
waypoint path between them. Two small networks drive it:

- **ENetLite**, a PointNet-style encoder, compresses the point cloud into a
  252-element feature vector phi.
- **PNetLite**, a stochastic multilayer perceptron, takes phi, the current
  end of a path and the destination, and proposes the next waypoint.

The planner grows paths from both ends. A batch of B forward paths starts at
c_s and B backward paths start at c_g. In each iteration PNetLite proposes one
new waypoint for every path end, and a collision checker tests whether a
forward/backward pair can be joined by a straight, obstacle-free segment.
The first such pair ends the search.

Dropout stays switched on at inference time, so each call of PNetLite samples
a different waypoint. This is why batching B paths helps: more proposals are
tried in each iteration.

This RTL keeps the whole inner loop on chip: both networks, the batched
bidirectional planner with its collision checks, and a stand-alone path
collision check. A host processor only writes arguments and buffer
addresses into registers, starts an operation and reads results from DRAM.
The outer algorithm (path smoothing, replanning, path-cost evaluation) stays
in host software and is not part of this RTL.

Everything is SystemVerilog-2017 in `rtl/`. One module or package is in each
file, and `rtl/p3net_pkg.sv` holds the shared types. Self-checking testbenches
are in `tb/`.

## Operations

The host selects an operation in `MODE` and writes 1 to `CTRL.start`.
`CTRL.done` and the interrupt mark its end.

| Mode | Operation | What it does |
|---|---|---|
| 1 | Init ENet | Streams the ENetLite parameter image from DRAM into the encoder's weight buffers. |
| 2 | Run encoder | Reads N points and computes phi, which stays in the core. |
| 3 | Init MT | Seeds the Mersenne-Twister that supplies the dropout random words (624 cycles). |
| 4 | Init PNet | Streams the PNetLite parameter image into the planner's FC layers. |
| 5 | Run planner | Reads c_s and c_g and runs the planner up to I iterations. Writes the paths and a status buffer. |
| 6 | Run collision checks | Checks every edge of a path in DRAM against the obstacles and sets `COLLIDE`. |

Modes 1, 3 and 4 run once per model. Mode 2 runs once per environment and
mode 5 once per start/goal task. An encoded phi serves any number of
planner runs.

## Number formats and arithmetic

- Activations, coordinates and `delta` are signed 32-bit 16.16 fixed point.
- Model parameters are signed 24-bit 8.16. In DRAM each parameter is stored
  sign-extended in a 32-bit word, four words per 128-bit beat.
- Products are exact (16.16 × 8.16 gives 32 fraction bits) and accumulate in
  64 bits.
- The bias is pre-shifted into the accumulator.
- The sum is narrowed to 16.16 once, by an arithmetic shift right of 16.
  This truncates towards minus infinity and wraps on overflow.
- BatchNorm is folded to `y = max(0, (x - mu) * s + beta)`. The host computes
  `s = gamma / sqrt(var + eps)` beforehand.

The collision checker also works in fixed point:

- The squared segment length is computed exactly in 64 bits.
- The length comes from a bit-serial square root.
- The number of pieces is `M = max(1, ceil(len / delta))`.
- The per-point step is `(p1 - p0) / M`, carrying 32 extra fraction bits so
  that the accumulated points stay within one LSB of exact. The last point is
  `p1` itself.

## Encoder (ENetLite2D)

The network is five building blocks BE(2,64), BE(64,64), BE(64,64),
BE(64,128) and BE(128,252). Each is an `fc_layer` followed by a `bn_relu`, and
a running element-wise maximum (`feature_max`) follows the last block.

The encoder never stores per-point features. Each point's 252-element result
is folded into phi as soon as it appears, so no buffer grows with N.

The ten units form a pipeline with valid/ready handshakes. The output
register of each unit is the buffer to the next, so several points are in
flight at once. `fc_layer` computes LANES output channels per cycle and walks
the input one element per cycle, so one vector takes
`IN * ceil(OUT/LANES)` cycles.

With LANES = 64 the slowest layer, FC(128,252), needs 512 cycles per point,
and a run takes about 512·N cycles: 3.6 ms for 1400 points at 200 MHz.
Points are fetched in chunks of 64, one beat each (x and y in words 0 and 1,
so the buffer is N×4 words). A chunk is fed completely before the next is
fetched.

## Planner (PNetLite2D and NeuralPlanner)

### Network

Each of the 2B rows is `[phi, c, g]` (256 elements), where c is a path end
and g is its destination.

The network is FC(256,256), FC(256,128), FC(128,64), FC(64,64) and FC(64,64),
each followed by Dropout-ReLU, and then a plain FC(64,2). Dropout-ReLU
outputs zero when x < 0 or when its 32-bit random word is below 2^31.
Surviving values are not rescaled.

The layers run one after another over all rows, with two row buffers used
in ping-pong. While the FC unit computes row r+1, the Dropout-ReLU stage
drains row r into the other buffer. Random words are consumed in the order
layer, row, channel.

With LANES = 16 an inference of 8 rows takes 57,856 cycles plus a few cycles
of pipeline overhead, about 0.29 ms at 200 MHz.

### Search loop

`neural_planner` holds these buffers:

- C: the current ends, with row 2j for the forward and row 2j+1 for the
  backward path of pair j.
- G: the destinations.
- N: the proposals.
- l: the path lengths.

Each iteration first runs PNetLite. Then, for pairs j = 0..B-1, it tests
(N_a, C_b), (C_a, N_b) and (N_a, N_b) in that order, where a is the forward
and b the backward path of pair j.

- At the first free segment it appends only the waypoints that the
  connection uses, writes the status and stops with success.
- If no segment is free, every path is extended by its proposal, C ← N, and
  the next iteration starts.
- After I iterations without a connection it stops with failure.

### DRAM layout

Everything is in 16-byte beats, with x and y in words 0 and 1.

- task: c_s in beat 0, c_g in beat 1.
- forward paths: waypoint t of path j at `addr_path_a + 16·(j·(I+1) + t)`.
  Backward paths use the same layout at `addr_path_b`.
- status: three words per pair, `{success flag, l_a, l_b}`, packed four
  words per beat.
- obstacles: two beats per box, minimum corner then maximum corner.

## Collision checking

`line_checker` tests one segment. It holds 64 boxes on chip and compares
each discretised point with 8 boxes per cycle, using 8 `obstacle_check`
units. A point on a box boundary counts as a collision.

- **64 boxes or fewer:** they stay loaded for the whole planning task.
- **More than 64 boxes:** they are processed in chunks of 64, and every
  chunk is tested against all points of the segment.
- The test stops at the first hit.

`collision_checker` (mode 6) reads a path in chunks of 64 waypoints. The
chunks overlap by one waypoint so that no edge is missed. The edges go one
at a time through a single `line_checker`.

## Host interface

**AXI4-Lite slave**, 32-bit registers:

| Offset | Register |
|---|---|
| 0x00 | CTRL: start, done, idle, irq enable |
| 0x04 | MODE |
| 0x08 | N |
| 0x0C | N_OBS |
| 0x10 | I |
| 0x14 | DELTA |
| 0x18 | SEED |
| 0x1C | PATH_LEN |
| 0x20 | COLLIDE (read only) |
| 0x24 | SUCCESS (read only) |
| 0x28–0x48 | buffer addresses: points, ENet image, PNet image, obstacles, task, forward paths, backward paths, status, path |
| 0x4C | iterations used (read only) |
| 0x50 onwards | 13 activity counters, listed in the header of `p3net_core.sv` |

**AXI4 master**, 128-bit data:

- INCR bursts of at most 64 beats.
- One read and one write outstanding.

Parameter images are laid out layer by layer. Each FC block holds its weights
in output-major order followed by its biases. In ENetLite each FC block is
followed by the BN mu, s and beta.

## Sizes

| Parameter | Default | Meaning |
|---|---|---|
| B | 4 | path pairs per batch |
| NC | 64 | points per encoder chunk |
| NC_OBS | 64 | obstacle buffer |
| TC | 64 | waypoints per path chunk |
| NCHK | 8 | Check units |
| ENC_LANES | 64 | parallel channels in the encoder FC layers (this design's choice) |
| PN_LANES | 16 | parallel channels in the PNetLite FC layers (this design's choice) |

All other defaults are the reference sizes of the paper.

## Where this design departs from the reference design

- Collision checks use 16.16 fixed point instead of 32-bit floating point.
  `delta` = 0.01 becomes 655 LSB, a step about 0.05 % coarser.
- The last planner layer is a plain FC(64,2). One description of the network
  counts six FC-ReLU-Dropout blocks ending in width 2; the block diagram shows
  a final FC without activation, and that reading was built.
- When a pair connects, only that pair's paths are extended. The other
  pairs keep their previous length in the status buffer.
- Point chunks are single-buffered: fetching overlaps nothing. Register map,
  DRAM layouts and reset behaviour (synchronous, active low, memories not
  cleared) are this design's own.
- phi is not copied into a (2B, 256) input buffer. It stays in the encoder's
  output register and is wired straight to the planner, which reads it as
  the first 252 elements of every row. The values are the same.
- The number of pieces is rounded up and is never below one. The reference
  design divides the segment length by delta and does not say how it rounds.
- PNetLite time grows with the number of rows, 2B. At B = 4 one inference
  takes about 0.29 ms at 200 MHz, against 0.465 ms in the reference
  measurements. A build with B = 1 takes about 0.07 ms, against 0.315 ms. The
  encoder matches: about 3.6 ms for 1400 points.
- Only the 2D models are built. The 3D variants need 3-D coordinates
  throughout the datapath and other network widths.

## Verification

Each block has a testbench `tb/tb_<block>.sv`. Each testbench checks the
block against a reference model written independently in the testbench and
prints a `TB_RESULT checks=… failures=…` line.

- The network units, the encoder and PNetLite are compared bit-exactly
  against a fixed-point reference.
- PNetLite's dropout is compared against an MT19937 model.
- The generator itself is compared against the published MT19937 sequence.
- Collision results are compared against a real-valued discretisation. The
  rare cases that a 2-LSB change of the boxes would flip are skipped.

`tb_p3net_core` runs the full core at its default parameters through
AXI4-Lite and a behavioural AXI4 DRAM. It executes every mode, checks that
phi matches the reference and that encoding takes 512 cycles per point, and
runs planner tasks that succeed and fail. It also covers obstacle chunks,
dropout, the path check and the interrupt. It fails unless every one of
these mechanisms was seen.

Example run with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/p3net_pkg.sv \
    tb/tb_p3net_core.sv --top-module tb_p3net_core && ./obj_dir/Vtb_p3net_core
```
