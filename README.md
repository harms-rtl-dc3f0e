# hARMS: a true-flow accelerator for event cameras

An event camera reports brightness changes as a stream of events
`(x, y, t)`, each one pixel and one microsecond-resolution timestamp.
*Local* optical flow for such a stream is usually computed by fitting a plane
to recent events close to a pixel. That works only on a few pixels, so it
sees only the motion component normal to an edge (the aperture problem). The
*true* flow of an event comes from pooling the local flow of many events
around it, over several window sizes, and then taking the window that
represents the motion best.

This RTL computes true flow with the fARMS rule (a fast variant of
Aperture Robust Multi-Scale flow):

* Keep the last `N` local-flow events in a ring buffer, the **recent flow
  buffer** (RFB). This takes the place of a per-pixel frame of events.
* For an event `e`, each buffered event `s` that is no more than `TAU` µs
  away from `e` in time is placed into the nested square windows it lies in.
  There are `ETA` windows centred on `e` with half-widths
  `w * WM/ETA` (`w = 1..ETA`).
* For every window, average the local flow `vx`, `vy` and its magnitude
  `mag` over the events that fall in it.
* The result is the average `(vx, vy)` of the window with the largest
  average magnitude.

The hardware is the programmable-logic half of a processor + FPGA system. The
processor computes local flow and collects events in batches of `P`. Each
batch, called a *call*, is sent to this block, which returns `P` true-flow
results. Inside, `P` identical cores compute the pooling for the `P` events
of a call at the same time, from a single pass over the RFB.

## Data flow of one call

```
 s_* stream ──► harms_ctrl ──► event_ram (P events, one per core)
        │                         │ x, y, t of event k
        └──────► rfb (ring of N) ─┴─► stream of L elements, 1 per cycle
                                      │ (broadcast to all P cores)
                      ┌───────────────┼───────────────┐
                 harms_accelerator  ...  harms_accelerator   (P cores)
                   window_arbiter ─► tag_lut
                   arms_compute: time filter ─► 3 × stream_averager ─► argmax
                      └───────────────┼───────────────┘
                                  result_ram ──► m_* stream
```

1. **Load** (`harms_ctrl`, state LOAD). The controller accepts `P` events
   on the `s_valid/s_ready` stream. Event `k` is written to entry `k` of
   the event RAM. It is also appended to the RFB, overwriting the oldest
   entry once the RFB is full. So every event of the call is in the buffer
   when its own pooling runs.
2. **Stream**. The RFB streams its `L` most recent entries, oldest first,
   one per cycle. `L` is the effective length (below). All `P` cores see
   the same element in the same cycle. Core `k` compares it with event `k`
   of the event RAM.
3. **Compute**. Each core tags the element with its window, filters it by
   time and adds it into per-window sums. After the last element it divides
   the sums and picks the window.
4. **Return**. The `P` results go into the result RAM in one cycle. They
   leave in order on `m_valid/m_ready`, with `m_last` on the `P`-th.

The controller accepts no new input until the last result of a call has
been taken (`busy` is high from the first event to the last result).
Batching the next call upstream can overlap with the running call.

### Effective buffer length

`buf_len` sets how many of the most recent buffer entries a call pools.
`0`, or any value above `N`, means all `N`. A value below `P` is raised to
`P`, so that every event of the call is at least in its own windows. A
shorter buffer gives a shorter call (one cycle per entry), so software can
trade pooling depth for rate when the event rate rises. The hardware never
holds more than `N`. `buf_len` is read in the cycle after the last event of a
call is accepted. Keep it stable from the first accepted event of the call
until then.

### Empty buffer slots

After reset the RFB memory is not cleared. A fill counter records how many
entries have been written. Each streamed element carries an `occ` bit, and
unwritten entries take part in no window. Otherwise they would act as
events at `(0,0)` at time 0.

## Window tagging

The window arbiter (`window_arbiter`) computes
`dmax = max(|x_s − x_e|, |y_s − y_e|)`. With `STEP = WM/ETA` (integer
division), window `w` (`w = 1..ETA`) holds the elements with
`dmax < w·STEP`. The windows are nested, so one number is enough. The tag
is the index of the smallest window that holds the element, counted from 0,
or `ETA` when even the largest window does not hold it. `tag_lut` computes
it in one cycle as the count of edges `w·STEP` (`w = 1..ETA`) that `dmax`
reaches. This is a row of `ETA` comparators against constants.

From the tag onward no coordinates are needed. An element with tag `t` is
added to windows `t, t+1, …, ETA−1`. Because of this, the order in which the
buffer is streamed has no effect on the result.

## Stream averager and divider reuse

`stream_averager` holds `ETA` sums and counts. For each valid element, all
windows with index `≥ tag` are updated in the same cycle, so the stream is
never stalled. After the element marked `last`:

* `NDIV` sequential restoring dividers (default 4) each compute
  `|sum| · 2^8 / count`. The quotient then takes the sign of the sum, and it
  is truncated toward zero.
* With more windows than dividers, the dividers are reused in
  `ceil(ETA/NDIV)` rounds. One round takes `DIV_W + 2` cycles, where
  `DIV_W = 16 + 1 + clog2(N+1) + 8` is the width of the shifted numerator
  (35 at `N = 1000`).
* The sums are then cleared for the next call.

The event being processed always lies in window 0 of its own core, so no
count is zero and no divide-by-zero check is needed. A zero divisor still
gives all ones, which is defined behaviour.

Each core has three averagers: `vx` and `vy` (signed), and `mag`
(unsigned). They run in lock-step.

## Compute core

`arms_compute`:

* It registers a valid flag for each element:
  `occ && |t_s − t_e| ≤ TAU`.
* It feeds the three averagers.
* When the averages are ready, it picks the window with the largest average
  magnitude. The compare is a strict `>`, so the smallest window wins a tie.
* It registers `(vx, vy)` of that window as the result.

`harms_accelerator` is one complete core: window arbiter, tag LUT and ARMS
compute.

## Number formats

| quantity | format |
|---|---|
| `x`, `y` | 11-bit unsigned pixel coordinates (up to 2047) |
| `t` | 32-bit unsigned microseconds; no wrap-around handling |
| local flow `vx`, `vy` | 16-bit signed integers |
| local magnitude `mag` | 16-bit unsigned integer |
| true flow `vx`, `vy` (output) | 32-bit signed Q24.8 (8 fractional bits) |

The types are in `harms_pkg`:

* `flow_event_t`: the 102-bit input event.
* `flow_val_t`: the buffered value fields.
* `true_flow_t`: the 64-bit output.

Sums are wide enough for `N` full-scale values, so nothing overflows at any
`N`.

## Timing and rate

Let `L` be the effective buffer length. The time from the clock edge that
accepts the `P`-th event of a call to the first `m_valid` is

    L + 8 + ceil(ETA/NDIV) · (DIV_W + 2)   cycles.

After that, each result takes two cycles when `m_ready` is held high. A full
call therefore takes

    P + L + 8 + ceil(ETA/NDIV) · (DIV_W + 2) + 2P   cycles.

At the defaults (`N = L = 1000`, `P = 16`, `ETA = 4`, `NDIV = 4`) that is
16 + 1045 + 32 = 1093 cycles. At 200 MHz this is 5.5 µs per 16 events, or
2.93 million events per second of compute. The buffer pass dominates. Adding
cores raises the rate almost in proportion, because all cores share one pass.
This figure does not include moving events and results between processor
memory and the fabric. In a complete system that transfer lowers the
end-to-end rate considerably.

Pipeline stages in a core: RFB read (1), arbiter (2, including the tag LUT),
time filter (1), averager rounds, argmax register (1). The remaining cycles
are controller handshakes.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 1000 | RFB depth: the maximum number of recent events pooled |
| `P` | 16 | cores, which is also the events per call |
| `ETA` | 4 | number of nested windows |
| `WM` | 320 | half-width of the largest window, in pixels |
| `TAU` | 5000 | time filter, in µs |
| `NDIV` | 4 | dividers per averager |

All are parameters of `harms_top` and pass down to the blocks that use them.
Other settings used in the tests include:

* `N=1500, ETA=10, WM=100` (dense rotating scenes);
* `N=2000, ETA=5, WM=50` (VGA resolution);
* `N=3286, ETA=4, WM=160` (a long buffer at a high event rate).

About resources, at the defaults:

* The 16 cores (48 averagers of 4 windows each) take most of the logic.
* The RFB is 1000 × 102 bits.

## Where this design departs from the published architecture

* **Streams, not vendor DMA.** In the original system a DMA engine and a
  block-RAM interface move data. Here the top has plain valid/ready streams
  (`s_*` for events in, `m_*` for results out), which a DMA engine or a
  testbench can drive.
* **Sequential dividers.** The published design uses pipelined dividers and
  reuses them beyond four windows. Here they are radix-2 sequential
  dividers, `DIV_W` cycles per division. The structure (at most four, reused
  in rounds) is kept.
* **Time filter is symmetric.** The published pseudo-code keeps events with
  an absolute time difference of at most `τ`. Its prose speaks only of
  dropping events more than `τ` *before* the processed one. The pseudo-code
  is followed. This matters only for the later events of the same call,
  which are already in the buffer.
* **Window sums indexed by window.** In the published pseudo-code, the
  window-averaging loop adds into the entry indexed by the tag-search loop
  variable, not by its own loop variable. This reads as a typo, and the
  sums here are indexed by window.
* **Shortened buffer = most recent entries.** How software chooses the
  effective length from the event rate is left to the caller.
* **Occupancy bit.** The fill counter and the `occ` bit replace clearing
  the buffer to zero.
* **Tie rule.** When two windows have the same average magnitude, the
  smaller window wins.
* **Widths.** The coordinate width (11 bits), the timestamp width (32 bits,
  no wrap handling), the Q24.8 output and the 16-bit local-flow inputs are
  this design's choices.
* **No local-flow engine.** Local flow (the plane fit) is computed upstream
  in software, as in the original system. It is not part of this RTL.

The tests use synthetic event streams, not recordings. They check the
hardware against a bit-exact model of the pooling rule. They do not check
the accuracy of the flow.

## Files

RTL (`rtl/`), bottom-up:

| file | block |
|---|---|
| `harms_pkg.sv` | widths, defaults, event and result structs |
| `tag_lut.sv` | distance → window tag |
| `window_arbiter.sv` | `dmax` and the tag for each streamed event |
| `seq_divider.sv` | restoring divider (helper) |
| `stream_averager.sv` | per-window sums, counts and shared dividers |
| `arms_compute.sv` | time filter, three averagers, argmax |
| `harms_accelerator.sv` | one core |
| `rfb.sv` | recent flow buffer (ring, occupancy, effective length) |
| `event_ram.sv` | the `P` events of a call, with a parallel read |
| `result_ram.sv` | the `P` results, one write port per core |
| `harms_ctrl.sv` | call sequencer |
| `harms_top.sv` | the whole accelerator |

Testbenches (`tb/`). Each prints `TB_RESULT checks=… failures=…`:

| testbench | what it checks |
|---|---|
| `tag_lut_tb` | every distance against the edge rule |
| `window_arbiter_tb` | tag, payload and 2-cycle latency |
| `stream_averager_tb` | averages against a model, latency, divider rounds |
| `arms_compute_tb` | filter, argmax, results and latency |
| `harms_accelerator_tb` | one core against the reference model |
| `rfb_tb` | ring order, overwrite, occupancy, shortened lengths |
| `event_ram_tb`, `result_ram_tb` | storage and read timing |
| `harms_ctrl_tb` | sequencing and handshakes, with behavioural cores |
| `harms_top_tb` | end to end at `N=64, P=4, ETA=6`, 40 calls |
| `harms_top_full_tb` | end to end at the default parameters, 66 calls |
| `harms_workloads_tb` | end to end in the three larger settings above |

The end-to-end benches share `harms_top_bench.svh` and the reference model
`harms_ref_pkg.sv`. Each one:

* counts the mechanisms it exercises: empty slots, wrap-around, events
  removed by the time filter, events outside every window, input and output
  stalls, divider reuse and shortened buffers;
* fails when one of them never happens.

### Simulating

With Verilator 5, list the packages first:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
    rtl/harms_pkg.sv tb/harms_ref_pkg.sv tb/harms_top_tb.sv \
    --top-module harms_top_tb -Mdir obj_harms_top_tb
./obj_harms_top_tb/Vharms_top_tb
```

Swap in any other testbench name. A block testbench needs only `harms_pkg.sv`
(and `harms_ref_pkg.sv` where it uses the model) before it. The default-size
bench runs in well under a minute. The testbenches do not depend on
initial memory contents, and they pass with random initial values
(`+verilator+rand+reset+2`).
