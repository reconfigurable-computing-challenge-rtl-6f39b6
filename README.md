# CaloClusterNet stream accelerator in SystemVerilog

A calorimeter trigger must decide, for every collision event, whether the event is worth keeping. It has a
budget of about 10 µs and must sustain millions of events per second. CaloClusterNet is a small graph
neural network for this job. Each event holds up to 128 calorimeter hits (nodes) of energy, time and
position. The network encodes every node, runs two GravNetConv graph convolutions over the whole event,
decodes per-node outputs, and finally selects condensation points, the nodes that represent clusters.

This RTL builds the per-node part of that network as one streaming pipeline. The pipeline is split into
the partitions of the original AMD Versal design: A and G run in programmable logic, and B, D and F were
AI Engine kernels there. Load and Store DMA engines connect the pipeline to DDR. The two GravNetConv
layers and condensation point selection (CPS) are not built. Their streams leave the top as ports, so
an implementation of them can be attached.

```
 DDR bank 0 ─AXI─> Load ─> A ─┬─> Retile 2→4 ─> B ─┬────────────────> gc1_tx ─> [GravNetConv] ─> gc1_rx ─> Retile ─┐
                              │                    └─> skip FIFO ───────────────────────────────────────────────> D ┘
                              │        ┌───────────────────────────────────────────────────────────────────────────┘
                              │        D ─┬─> gc2_tx ─> [GravNetConv] ─> gc2_rx ─> Retile ─> F ─> Retile 4→2 ─> G ─┬─> cps_tx ─> [CPS]
                              │           └─> skip FIFOs (2 taps) ──────────────────────────┘                     │        │
                              ├─> A-skip FIFO ────────────────────────────────────────────┘(into F)              result FIFO  cps_rx
                              └─> input-energy FIFO ────────────────────────────────────────────────> G (mult)     └─> join ─> Store ─AXI─> DDR bank 1
```

## Streams, lanes and events

Every connection is a valid/ready stream. A beat carries several nodes (lanes). Each node has F
features of W bits, packed as `[LANES-1:0][F-1:0][W-1:0]`. A `last` bit marks the final beat of an
event. The original design ran two nodes per clock in programmable logic and four per kernel call on the
AI Engines. The RTL keeps these numbers:

- Partitions A and G, Load, Store and the GravNetConv ports use 2 lanes.
- Partitions B, D and F use 4 lanes.
- `ccn_lane_conv` (the Retile step) joins two 2-lane beats into one 4-lane beat, or splits one 4-lane
  beat into two. This keeps every stage at the same node rate: 2 nodes per clock, so a 128-node event
  takes 64 clocks.

A and G compute in 16-bit fixed point because they sit at the system boundary. The rest uses 8 bits, as
in the original design.

## Dense layers and weights

`ccn_dense` computes one fully connected layer for every lane in parallel, with one register stage:

    y = saturate( relu( (W·x + (b << SHIFT)) >>> SHIFT ) )

A Linear layer followed by ReLU is fused into one Dense. A Linear layer without ReLU is the same module
with `RELU=0`. SHIFT is 6 for 8-bit layers and 8 for 16-bit layers. The original network was trained in
QKeras; its scales and rounding are not reproduced here.

Weights are registers loaded at run time over the configuration bus `cfg`:

- The bus is a `cfg_t` struct: `we`, `layer`, `addr`, `data`.
- `layer` picks a layer by its `layer_id_e` number in `ccn_pkg`.
- `addr = o*(IN+1)+i` writes weight W[o][i]; `i == IN` writes the bias.

All weights reset to zero.

The layer sizes are this design's own choice, because the original gives only layer types:

| name | value | meaning |
|---|---|---|
| IN_F | 5 | input features (energy, time, x, y, z) |
| H | 16 | hidden width |
| H_SKIP | 8 | width of the A skip |
| GC_IN | 12 | features sent to a GravNetConv |
| GC_OUT | 16 | features returned by a GravNetConv |
| N_HEADS | 8 | outputs: energy, signal, x, y, z, two clustering coordinates, beta |

All of these are in `ccn_pkg`.

## Partitions

- **A** (`ccn_seg_a`, 16 bit): a Dense from the input features to H, and a second Dense to H_SKIP that
  becomes a skip connection into F. It also taps the raw input energy for the output multiplier.
- **B** (`ccn_seg_b`): a Dense, then one Linear (no ReLU) that produces the GravNetConv input. The two
  Linear layers that feed GravNetConv (coordinates and features) are merged into this one. The Dense
  output also goes to D as a skip.
- **D** (`ccn_seg_d`): concatenates the first GravNetConv output with the B skip, then runs three Dense
  layers and a Linear to the second GravNetConv. The second and third Dense outputs leave as skips to F.
- **F** (`ccn_seg_f`): concatenates the second GravNetConv output with D's third skip and runs two Dense
  layers. It then concatenates the result with D's second skip and the A skip, and applies a final Dense.
- **G** (`ccn_seg_g`, 16 bit): one Linear produces all 8 heads. The energy head is multiplied by the input
  energy, `(head·E) >>> 8`, saturated to 16 bits.

## Skip connections and why they need FIFOs

A GravNetConv works on a whole event: it cannot return a node until it has seen all nodes of the event.
Meanwhile the skip data of that event must wait. The top therefore holds each skip in a `ccn_fifo` sized
in whole events. At the default parameters these are:

| FIFO | depth |
|---|---|
| B skip | 4 events |
| each D skip | 4 events |
| A skip | 8 events |
| input energy | 8 events |
| result | 4 events |

`ccn_concat` joins two streams and moves a beat only when both sides have one. It asserts that their
`last` flags agree. A stream used twice goes through `ccn_fork`, which moves a beat only when every
consumer is ready.

If an external layer holds more events than these FIFOs cover, the pipeline stalls rather than lose data.
Deadlock cannot happen, only lower throughput. The default depths suit a GravNetConv that holds about
two events.

## Memory interface

`ccn_load` and `ccn_store` are AXI4 masters with 64-bit addresses and 256-bit data.

An event record is 2048 bytes, read or written as one 64-beat INCR burst:

- Each beat holds two nodes in 128-bit slots.
- On input, a slot holds five 16-bit words: energy, time, x, y, z.
- On output, it holds energy, signal, x, y, z at bits 0..79 and the condensation-point flag at bit 80.
- An event with fewer than 128 hits is zero-padded.

Load keeps up to 4 read bursts in flight. Store issues each write address ahead of its data and reports
`done` when all write responses have arrived. Any error response raises `axi_error`.

Host control is a `start` pulse with `src_base`, `dst_base` and `num_events`.

## Performance

The testbench measures the pipeline with external layers that never stall:

- It accepts one event every 64 clocks: 3.9 M events/s at 250 MHz. The original design reaches 2.94 M
  events/s.
- A single event takes 291 clocks (1.16 µs at 250 MHz) from `start` to `store_done`. GravNetConv and
  CPS time are not included: the behavioural stand-ins add only a few clocks beyond receiving the event.

The original design's end-to-end latency was 7.15 µs, including those layers. It ran the AI Engine
kernels at 1.25 GHz; this RTL runs everything on one clock.

## Departures from the original design

- GravNetConv and condensation point selection are not built; they are stream ports on `ccn_top`.
- B, D and F are written as logic rather than AI Engine software. The lane counts and precisions match.
- All layer widths, fixed-point shifts, the memory record format, AXI widths and FIFO depths are this
  design's own choices.
- The weights are run-time registers rather than constants compiled into the kernels.

## Files

`rtl/`:

- `ccn_pkg`: sizes, layer ids, `cfg_t`.
- `ccn_dense`, `ccn_concat`, `ccn_fork`, `ccn_fifo`, `ccn_lane_conv`.
- `ccn_seg_a/b/d/f/g`: the partitions.
- `ccn_load`, `ccn_store`.
- `ccn_top`.

`tb/`:

- One self-checking testbench per module, `tb_<module>`.
- `ccn_tb_pkg`: a software model of every layer.
- `ccn_axi_mem`: an AXI memory model.
- `ccn_gravnet_standin` and `ccn_cps_standin`: simple behavioural replacements for the external layers.
  They are deterministic event-level functions, not the real algorithms.

`tb_ccn_top` runs the whole design at its default parameters:

- It loads all weights and runs events with random stalls from memory and the stand-ins, then without
  stalls.
- It checks every output word against the software model, the 64-clock interval (a failure above 85
  clocks) and the single-event latency.
- It counts each mechanism and fails if one never occurred: Retile widening and narrowing, Concat waits,
  skip FIFO occupancy, Load and Store backpressure, fork stalls, zero padding, and several bursts in
  flight.

Every testbench prints `TB_RESULT checks=N failures=M`. To simulate with Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/ccn_pkg.sv tb/ccn_tb_pkg.sv tb/tb_ccn_top.sv --top-module tb_ccn_top
    ./obj_dir/Vtb_ccn_top

Assertions are inside `ifndef SYNTHESIS`.
