# A dataflow fabric for autonomous-machine accelerators

An autonomous machine runs a fixed software pipeline. Sensors feed perception;
perception feeds tracking, prediction and planning; planning feeds control,
which drives the vehicle. Each stage has a frequency it must keep. On a
conventional SoC each stage can run on its own accelerator, but the CPU
coordinates them. A finished accelerator interrupts the CPU, its driver starts
the next accelerator, and data moves through main memory. The CPU stays awake
and sits in the path of every frame.

This RTL removes the CPU from that loop. The pipeline is treated as a *macro
dataflow graph*, in which each node is a whole task such as localization. Each
node gets a hardware accelerator, and each arrow gets a dedicated on-chip
buffer. A node fires on its own, like an instruction in a dataflow machine,
when all its inputs are present. Two rules fit real-time pipelines:

* **A node never waits past its firing time.** If a firing period goes by
  without a firing, the node fires on the latest data it has, stale or not.
* **Consumers may drop data.** A consumer takes the newest token from a buffer
  and discards older ones. The run-time side can ask for strict in-order
  delivery with back-pressure on any buffer. A drop policy switches that buffer
  back to dropping when its producer stalls too long.

A small run-time block also scales the localization accelerator to its
workload. It enables more or fewer parallel lanes through clock gates,
according to how many visual feature points the accelerator reports.

The task accelerators themselves (perception networks, trackers, planners,
and so on) are not in this RTL. The architecture does not prescribe them.
Each node brings out a start/operands/done/result port where any accelerator
can be attached.

## The graph

The top level (`daa_top`) is wired as the pipeline of a level-4 vehicle. The
graph is a table in `daa_pkg` (`EDGES`, `NODE_NIN`, `NODE_HZ`):

| node | inputs (buffer number) | fires at |
|---|---|---|
| 0 2D perception | camera (0) | 30 Hz |
| 1 3D perception | LiDAR (1) | 10 Hz |
| 2 perception fusion | 2D perception (2), 3D perception (3), radar (4) | 10 Hz |
| 3 tracking | fusion (5) | 10 Hz |
| 4 prediction | tracking (6) | 10 Hz |
| 5 localization | LiDAR (8), GNSS/IMU (9) | 10 Hz |
| 6 planning | prediction (7), localization (10) | 10 Hz |
| 7 control | planning (11) | 100 Hz, to the chassis port |

The sensor rates are camera 30 Hz, LiDAR 10 Hz, radar 10 Hz and GNSS/IMU
100 Hz. A LiDAR frame is written into both of its buffers in the same cycle.
The graph has no loops. A node's result is written into all of its output
buffers at once, when every one of them can take it.

The buffers carry *tokens* of 64 data bits plus a 16-bit sequence number. A
token stands for a frame descriptor or a small result, not for a raw camera
frame. See "Departures and limits" below.

## Buffers: latest-data and in-order (`daa_buffer`)

Each buffer is a ring of `DEPTH` (default 4) token slots. It counts the
*fresh* tokens, meaning those written but not yet consumed. The consumer sees
`fresh`, `ever` (some token has arrived since reset) and `rd_tok` (what a
consume would take now). A consume pulse takes `rd_tok` in the same cycle.

`drop_en` selects the mode, per buffer and at run time. At the top level it
comes from the drop policy described below:

* **latest-data** (`drop_en = 1`). The producer is never refused. `rd_tok` is
  the newest token. A consume clears every fresh token, and the older ones
  count as dropped. A write into a full ring overwrites the oldest token, which
  also counts as dropped.
* **in-order** (`drop_en = 0`). `rd_tok` is the oldest fresh token, and a
  consume removes only that one. When the ring is full, `wr_ready` falls:
  * a node producer waits, and is stalled;
  * a sensor cannot wait, so its frame is lost. It counts in `stall_cnt`.

With nothing fresh, `rd_tok` shows the last token consumed. This lets a
timer-fired consumer reuse the latest value.

## When a node fires (`daa_fire_ctrl`)

This is the part that decides the system's timing.

A node is idle, or busy from its firing until its result has left. While it is
idle it fires in the first cycle in which either:

1. **data:** every input buffer has a fresh token, or
2. **timer:** a timer firing is *due*, and every input has had at least one
   token since reset.

The timer does not restart at each firing. The shared timebase gives a tick
every 0.1 ms. Time is cut into fixed *windows* of `PERIOD` ticks: 333 ticks
for 30 Hz, 1000 for 10 Hz, 100 for 100 Hz. A timer firing becomes due at the
last tick of a window in which the node did not fire. It stays due until the
node fires, for any reason.

Fixed windows matter. Suppose the period restarted at every firing. A node
whose inputs arrive at exactly its own rate would then have its timer run out
a little before each frame arrives. It would fire on old data, and fire again
a moment later on the new frame, which doubles its rate. With fixed windows:

* a node fed at its own rate fires on data alone;
* a window that a frame misses because of jitter gets one timer firing;
* a node fed more slowly than its rate fills every empty window with a timer
  firing. Control at 100 Hz behind 10 Hz planning fires once per 10 ms:
  9 timer firings and 1 data firing per 100 ms.

Suppose a timer firing is already due and another whole window passes with no
firing, because the node is still busy. The node has then missed its
frequency, and `miss_cnt` counts one per such window. A node that is only a
little late is not counted.

Each firing pulses `consume` on every input; a buffer with nothing fresh
ignores the pulse. `cause` says whether the firing was data- or timer-driven.
`fire` is combinational, so a timer firing can happen in the cycle of the
window's last tick.

## The node wrapper and the accelerator port (`daa_node`)

`daa_node` puts the firing controller in front of an accelerator:

```
cycle 0        fire: operand tokens latched from the buffers, buffers consumed
cycle 1        acc_start = 1, acc_op / acc_cause valid (held until next firing)
cycle 1+L      acc_done = 1 with acc_result   (L >= 1; done in the start cycle is ignored)
cycle 2+L      out_valid = 1, out_data = result; held until out_ready
```

With `out_ready` high, the node is idle again at cycle 3+L, so it turns
around in L+3 cycles. The node cannot fire while busy. A full in-order buffer
downstream holds the result, and so stalls the node.

## Deciding when to drop (`daa_drop_policy`)

The host writes a *requested* mode per buffer (`drop_req`). With
`auto_drop_en` set, the policy counts, for each buffer in in-order mode, the
cycles in which its producer is refused. The count starts again whenever the
buffer drains. When it reaches `STALL_LIMIT`, the buffer is forced into
latest-data mode:
* the backlog is dropped at the next consume;
* the producer is free again.

When the buffer is next empty, the force is lifted and in-order delivery
resumes. A refused sensor frame counts as one stall cycle.

The default limit is 100,000 cycles (1 ms at 100 MHz). This bounds how long a
slow consumer can hold up its producer, and so how far the stall can spread
upstream. `edge_drop_mode` and `edge_forced` show the modes in effect.

## Scaling localization to its workload (`daa_scaler`, `daa_clock_gate`)

Localization latency grows with the number of visual feature points in the
frame, over a range of roughly 0–210. The localization accelerator reports
that count with `feat_valid`/`feat`. The scaler works out the lane count the
frame needs:

`need = ceil(feat / FEAT_PER_LANE)`, clamped to 1..`LANES` (defaults 53 and 4).

* If `need` is above the enabled count, all those lanes are enabled at once.
* If `need` stays below it for `HOLD` frames in a row (default 4), one lane is
  switched off.

`loc_lane_en` is a thermometer code, and each lane has its own latch-based
clock gate driving `loc_gclk[l]`. With `scale_auto_en` low, every lane stays
on, which is the static worst-case design. The latch in `daa_clock_gate` is
intended. A real flow replaces it with the library's clock-gating cell.

## Top-level ports (`daa_top`)

* `drop_req[12]`, `auto_drop_en`: requested buffer modes and the drop
  policy switch.
* `scale_auto_en`: turns workload scaling on.
* `test_en`: forces the gated clocks on.
* `sens_valid[4]`, `sens_data[4]`: sensor frames, one-cycle pulses.
* `acc_start[8]`, `acc_op[8][3]`, `acc_cause[8]`, `acc_done[8]`,
  `acc_result[8]`: one accelerator port per node. Unused operand slots read 0.
* `feat_valid`, `feat`, `loc_lane_en`, `loc_gclk`, `loc_level`: localization
  scaling.
* `cmd_valid`, `cmd_data`, `cmd_ready`: control commands to the chassis.
* Status, all 16-bit wrapping counters: per-buffer drop, stall and occupancy;
  per-node firing, timer-firing, miss, output-stall and busy; scale-up and
  scale-down counts; `drop_fallback_cnt`; `edge_drop_mode` and `edge_forced`;
  `now`, the tick count since reset.

Parameters, with their defaults:

| parameter | default |
|---|---|
| `CLK_HZ` | 100 MHz |
| `TICK_HZ` | 10 kHz |
| `DEPTH` | 4 |
| `LANES` | 4 |
| `FEAT_PER_LANE` | 53 |
| `HOLD` | 4 |
| `STALL_LIMIT` | 100,000 |

Reset is synchronous and active low throughout.

## What is taken from the architecture and what is chosen here

Taken from the architecture:
* the node set, the arrows and the frequencies of the vehicle pipeline;
* one dedicated buffer per producer→consumer pair;
* firing without a CPU, when inputs are ready;
* never blocking past the firing time;
* consumers that take the latest data and drop older frames;
* the run-time system choosing when to drop, to avoid excessive stalls;
* scaling the hardware to the feature count by clock gating.

Chosen here:
* token width and format;
* ring depth;
* the in-order mode as the alternative to dropping;
* fixed firing windows and the miss rule;
* the stall-count trigger of the drop policy and its release when the buffer
  drains;
* clock and tick rates, and the 333-tick rounding of 30 Hz;
* the start/done/valid/ready handshakes;
* lane count, thresholds and hysteresis;
* doing the scaling and dropping policies in hardware, where the
  architecture leaves them to software;
* all counters.

## Departures and limits

* **Frames are not stored on chip.** The sensing stage moves about 100 MB/s.
  A 30 Hz camera frame is several megabytes, and here a token is 8 bytes. The
  buffers carry descriptors. Sizing buffers for real frame data means widening
  `data_t` or adding a frame store behind each buffer.
* **No accelerator datapaths.** Every node's work happens outside, behind
  `acc_*`.
* **One graph.** The top is built for the vehicle pipeline. A different
  pipeline needs a new `EDGES`/`NODE_NIN`/`NODE_HZ` table and new sensor/node
  counts in `daa_pkg`. An example is a robot vacuum: IR, camera, IMU and
  wheel-odometry sensors, with perception, localization and a combined
  planning-and-control node.
* **The policies are fixed rules in hardware.** The scaling and dropping
  policies are simple hardware rules. A software run-time could set their
  inputs (`drop_req`, `auto_drop_en`, `scale_auto_en`), but it cannot replace
  the rules.
* **Buffers are distributed.** Each arrow has its own ring next to its
  consumer. The architecture allows the same per-pair buffers to live in one
  shared memory, partitioned per pair; that layout is not built.
* **Nodes are stateless.** The fabric keeps no state for a node between
  firings beyond the last token of each input. Any state an algorithm keeps
  (a filter's estimate, say) lives inside its accelerator.
* **Unused operand slots are tied to zero.** Nodes with fewer than three
  inputs drive 0 on their spare `acc_op` slots.

## Simulation

Each module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/daa_pkg.sv tb/tb_daa_buffer.sv --top-module tb_daa_buffer
./obj_dir/Vtb_daa_buffer
```

| testbench | what it checks |
|---|---|
| `tb_daa_buffer` | A queue model, cycle by cycle, over random traffic in both modes. |
| `tb_daa_fire_ctrl` | A window model; the exact cycle of a timer firing; a miss. |
| `tb_daa_node` | Operands, the start cycle, the result, holding while not ready, and the L+3 turn-around. |
| `tb_daa_timebase` | Tick spacing. |
| `tb_daa_scaler` | Lane levels and hysteresis. |
| `tb_daa_clock_gate` | Gated edges against the enable, and glitch-freedom. |
| `tb_daa_drop_policy` | Stall counts, forcing at exactly the limit, and release. |
| `tb_daa_top` | The whole design at its default parameters, below. |

`tb_daa_top` attaches a behavioural accelerator (`tb/daa_accel_model.sv`) to
every node and runs 1.05 s of chip time, about 105 million cycles and a few
minutes of simulation:

* It checks every node's firing count over 0.5 s against its frequency (±1).
* It checks that control's timer firings are whole 10 ms periods apart.
* It checks that every operand has the data its producer wrote under that
  sequence number.
* It checks that in-order buffers never skip and latest-data buffers hand
  over a newest token.
* It checks that every chassis command is the next control result.
* It checks the gated-clock edge counts.

It also switches two buffers to in-order mode. It then slows control past two
periods while the drop policy is on, and checks that the policy bounds the
stall of 2D perception. At the defaults, 2D perception stalls for 69 ms in
200 ms without the policy. With the policy it stalls for 1 ms in 100 ms, ended
by a single forced fallback. It fails if any of the following never happens: a data
firing, a timer firing, a drop, a producer stall, a refused sensor frame, a
miss, a mode switch, a forced fallback, a scale-up, a scale-down, a gated
lane.
