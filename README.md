# SNNF: a spiking-network noise filter for event cameras, in SystemVerilog

An event camera (dynamic vision sensor, DVS) does not output frames. Each pixel
reports an *event* `(x, y, t, p)` when its brightness changes, where `p` is the
direction of the change. Besides real events, the sensor emits
*background-activity noise*. These are isolated events caused by leakage and
shot noise in the pixel. This design decides for every incoming event whether it
is signal or noise. It sits next to the sensor and passes on the event with a
one-bit verdict.

The filter rests on two ideas:

* **A short history of binary images instead of timestamps.** Other filters
  keep a 32-bit timestamp for every pixel. This one keeps a few 1-bit images
  instead. An event-based binary image (EBBI) marks the pixels that fired
  within one time window; there is one image per polarity, so images come in
  pairs. The filter keeps the current pair plus one older pair, and a spare
  pair that is being erased. For a 346 x 260 sensor this is 3 x 2 x 346 x 260
  bits, about 66 KB.
* **A tiny spiking network as the judge.** For each event, the 5 x 5
  neighbourhood of both polarities is cut from each of the two most recent
  pairs. This gives two binary vectors of 50 bits, one per pair. They are fed,
  oldest first, as two time steps into a 50-30-1 network:
  * FC1 is a fully connected layer.
  * The hidden layer is made of 30 leaky integrate-and-fire (LIF) neurons.
  * The output is a linear neuron.

  The event is signal when the output of the last time step reaches a
  programmable threshold.

The RTL filters one event every 9 clock cycles. The decision comes out
9 cycles after the event is accepted.

## Block map

```
event in ──► snnf_fsm ──► addr_gen ──► ebbi_mem (3 pairs x 5 banks of ebbi_sram)
  (valid/ready)   │           │               │   ▲
                  │           │               ▼   │ clear sweep
                  │           └─► patch_extract ◄─┘
                  │                     │ 2 x 50 bits
                  ├─► ebbi_stack_ctrl   ▼
                  │   (windows,      fcsnn: buffer → fc1_layer → lif_layer → fc2_layer
                  │    rotation,            │ score (13 bit, signed)
                  │    wiping)              ▼
                  └──────────────────► classifier ──► output_valid, signal_noise_n
```

| module | role |
|---|---|
| `snnf_pkg` | sizes, widths, trigger-mode enum, small helper functions |
| `snnf_top` | the filter: wires all blocks together |
| `snnf_fsm` | sequences one event through the stages; valid/ready; stall |
| `addr_gen` | stage 1: write address of the event's pixel, read addresses of its patch |
| `ebbi_mem` | 15 single-port SRAMs, with routing of writes, reads and clears |
| `ebbi_sram` | one SRAM bank: synchronous read, bit-masked write |
| `ebbi_stack_ctrl` | time windows, round-robin rotation of the pairs, erase engine |
| `patch_extract` | stage 2: picks the 25 + 25 patch bits out of the fetched words |
| `fcsnn` | stage 3: input buffer and the three network layers |
| `fc1_layer`, `lif_layer`, `fc2_layer` | the layers |
| `classifier` | stage 4: score >= threshold, registered with the event fields |

## The EBBI stack and its rotation

Three pairs are kept in memory. At any time:
* one pair is **active**, and every event sets its own pixel there;
* one pair is the **previous** one;
* one pair is **being cleared**.

The patch of an event is read from the previous pair (time step 0) and the
active pair (time step 1). The event's own pixel is written before its patch is
read, so the patch always contains the event itself.

A window closes when one of two conditions holds, selected with `trig_mode`:
* **time**: `t - t_start >= T_E`. The default is 25 ms, with `t` in
  microseconds.
* **count**: the window has collected `N_E` events. The default is 30,000.

In `TRIG_EITHER` mode, whichever condition comes first closes the window.

The event that closes a window is still written into the old active pair. Then
the pairs rotate:
* the cleared pair becomes the new active pair;
* the oldest pair starts to be erased;
* `t_start` takes that event's timestamp, and the count restarts.

Pair numbers count downward modulo 3: the active pair goes 0, 2, 1, 0, …

Erasing is a background sweep. It writes zero to one word of every bank of the
pair per cycle, which takes 4,524 cycles. At 9 cycles per event that is about
500 events, far shorter than a window in normal operation.

If a second rotation falls due while the sweep is still running, the
controller holds that event before its write (`stall`) until the sweep ends.
This can happen after a long pause followed by two widely spaced timestamps.

After reset, and on a `mem_init` pulse, all three pairs are erased at once.
`event_ready` stays low during those 4,524 cycles.

## Memory organisation: five banks, row-interleaved

A 5 x 5 patch touches 5 image rows. Each pair is therefore split over 5
single-port SRAMs, with **image row `y` stored in bank `y mod 5`** at bank row
`y / 5`. Any five consecutive rows then land in five different banks, and all
five can be read in the same cycle.

Each SRAM word is 8 bits and covers 4 neighbouring pixels of one row, for both
polarities:

```
bit   7    6    5    4    3    2    1    0
     n3   n2   n1   n0   p3   p2   p1   p0      pixel x = 4*word + i
```

A row of 346 pixels takes 87 words, and a bank holds 52 rows, so each bank is
4,524 words deep. The memory has 15 banks in all.

To write an event, one bit of one word is set through the write mask. No
read-modify-write cycle is needed.

**Reading the patch takes two cycles.** The five columns `x-2 .. x+2` always
lie within two neighbouring words:
* `w0 = floor((x-2)/4)`
* `w0 + 1`

The first read cycle fetches `w0` from all five banks of both read pairs. The
second fetches `w0+1`. Put side by side, the two words give an 8-pixel window
per polarity. Patch column `c` is window bit `(x-2) mod 4 + c`.

Rows and columns that fall outside the sensor are forced to zero. This is the
patch's zero padding. Their addresses are clamped into range, so the data read
for them is never used.

The patch is flattened as `P[c][d] → bit c*5 + d`, where `c` is the column
offset and `d` the row offset. Positive pixels use bits 0..24 and negative
pixels bits 25..49.

## The network pipeline

```
cycle:        k    k+1    k+2    k+3    k+4
input buffer  s0   s1
FC1                s0     s1
LIF                       s0     s1
FC2 / output                     s0     s1  → y_valid
```

The two time steps flow through the three registered layers one cycle apart,
so an event occupies `N_EBBI + 3 = 5` cycles.

* **FC1**: each of the 30 neurons adds the signed 8-bit weights of the active
  input bits. The inputs are binary, so no multipliers are needed. The result
  is a 15-bit current.
* **LIF**: for each neuron,
  `V ← (spiked or first step) ? 0 : V − (V >>> 3)`, then `V ← sat12(V + I)`,
  then `spike ← V >= 64`.
  * The leak factor is β = 7/8.
  * A neuron that fired restarts from zero (hard reset).
  * Every event starts from rest.
  * The membrane is 12 bits and saturates.
* **FC2**: the score is the sum of the signed 8-bit weights of the neurons that
  spiked. It is 13 bits, signed.

Weights are loaded through a port before use, and reset to zero:
* `w_layer = 0` selects FC1, at address `j*50 + i`;
* `w_layer = 1` selects FC2, at address `j`.

Trained weights are not part of this design.

## Event timing

The cycle count starts at E0, the clock edge at which `event_valid &&
event_ready` accepts the event:

| cycle after E0 | state | work |
|---|---|---|
| 1 | `S_ADDR` | pixel write into the active pair; patch addresses registered |
| 2 | `S_RDA` | read words `w0` of 5 banks x 2 pairs |
| 3 | `S_RDB` | read words `w0+1`; the event is counted, and the stack may rotate at this edge |
| 4 | `S_LOAD` | patch vectors enter the network buffer |
| 5–8 | `S_WAIT` | network |
| 9 | — | decision registered: `output_valid` is high for one cycle after E9 |

`event_ready` is high again in the last wait cycle, so the next event can be
accepted at E9. This gives **one event per 9 cycles**, or 44 Meps at 400 MHz.

The rotation takes effect at E3. Its reads in cycles 2 and 3 have already used
the old pair numbers, and the erase of the new spare pair starts after E3.
Reads and the erase therefore never meet in one bank.

## Top-level interface (`snnf_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `reset_n` | in | 1 | clock; asynchronous active-low reset |
| `event_valid` / `event_ready` | in / out | 1 | handshake; the event is taken when both are high |
| `x_addr`, `y_addr` | in | 9 | pixel coordinates (0-based) |
| `pol` | in | 1 | 1 = positive change |
| `t` | in | 32 | timestamp, in microseconds |
| `mem_init` | in | 1 | pulse: erase the stack and restart the windows |
| `threshold` | in | 13 | signed decision threshold |
| `trig_mode` | in | enum | `TRIG_TIME`, `TRIG_COUNT`, `TRIG_EITHER` |
| `w_we`, `w_layer`, `w_addr`, `w_data` | in | 1/1/11/8 | weight loading |
| `output_valid` | out | 1 | one pulse per event |
| `signal_noise_n` | out | 1 | 1 = signal, 0 = noise |
| `out_score`, `out_x`, `out_y`, `out_pol`, `out_t` | out | | score and the event's fields |
| `init_busy`, `stall`, `stack_rotate` | out | 1 | status |

## Where this RTL departs from, or goes beyond, the paper

The paper's text disagrees with itself on a few points. The RTL resolves each
of them as follows.

* **Bank mapping.** One passage describes contiguous blocks of rows per bank.
  The memory figure instead maps rows 0..4 to banks 0..4 and calls the image
  "striped". The RTL interleaves rows (`y mod 5`), because only that mapping
  puts the five rows of every patch in five different banks.
* **Word width.** The parameter table gives 8 bits, while the discussion
  chooses 4-bit words. The RTL uses 8-bit SRAM words made of 4 pixels x 2
  polarities, so each polarity image is read 4 bits at a time. The figure of
  40 fetched bits per patch and pair refers to one polarity.
* **Latency.** The ASIC description gives 9 cycles per event; the FPGA
  description gives 10. The RTL follows the stage-by-stage count of 9.
* **Throughput.** One sentence claims one classification per cycle once the
  pipeline is full. The energy calculation assumes 9 cycles per event, and
  single-port banks that need three accesses per event rule out one event per
  cycle. The RTL processes one event per 9 cycles.
* **Trained values.** The trained weights, β and the hidden threshold are not
  published. β = 7/8 and V_th = 64 are parameters (`LEAK_SHIFT`,
  `VTH_HIDDEN`), and the weights are loadable.
* **Own additions** that the paper does not describe:
  * the valid/ready handshake;
  * the timestamp input, and the µs unit for it;
  * the trigger-mode input;
  * the erase engine, the stall, and the start-up erase;
  * membrane saturation;
  * the extra status and echo outputs.
* **Not built:** the camera itself, and the FPGA/ASIC wrappers (I/O, SRAM
  compiler macros). `ebbi_sram` is a behavioural-style synthesizable array
  that stands for the SRAM macro.

## Sizes and what fits

All sizes are parameters of `snnf_top` and default to the paper's
configuration:

| parameter | default |
|---|---|
| `W`, `H` | 346, 260 |
| `NEBBI` | 2 |
| `NHID` | 30 |
| `T_E` | 25,000 µs |
| `NE` | 30,000 |

Coordinate widths (9 bits) are set in `snnf_pkg`.

* A **346 x 260 sensor** needs 539,760 bits of image memory; 542,880 are built.
* A **1280 x 960 sensor** would need 7.4 Mbit and wider coordinates.
* A deeper history, for example `NEBBI = 8`, needs `NEBBI + 1` pairs and
  `NEBBI + 7` cycles per event. The end-to-end testbench also passes with
  `N_EBBI = 3` set in `snnf_pkg`: 4 pairs, 20 banks and 10 cycles per event.
  Its reference model and latency check follow the package value.

## Simulating

Each block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=… failures=…`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_snnf_top \
    -y rtl -Irtl rtl/snnf_pkg.sv tb/tb_snnf_top.sv -o sim
./obj_dir/sim
```

`tb_snnf_top` runs the whole filter at its default size. It checks about
35,000 events against a reference model written inside the testbench:
* the score, the decision and the echoed fields of every event;
* a 9-cycle latency for every event that is not stalled;
* that back-to-back events are spaced 9 cycles apart.

It also makes every mechanism happen and counts each one:
* rotation by time, by count and by either trigger;
* a stall on a running erase;
* a `mem_init` restart;
* border patches.

`tb_snnf_denoise` runs a workload through the full-size filter. The scene is
an edge moving at 1 pixel/ms, plus uniform background noise at about
5 Hz per pixel: 100 ms of events, about 67,000 in all. No trained weights are
available, so the network gets hand-set weights that turn it into a
local-density detector:
* every FC1 weight is 6..10, except for the event's own pixel, which is 0;
* every FC2 weight is 4;
* the threshold is 80.

With these weights, after the first window:
* 82 % of the signal events are kept;
* 98 % of the isolated noise events are removed;
* events are processed at exactly one per 9 cycles.

Noise that falls on the edge's own recent trail is mostly kept, as it would be
by any correlation-based filter. This test shows that the datapath filters; it
does not reproduce the paper's accuracy figures, which depend on the trained
weights.

The unit testbenches compare each block against its own independent model:
* the SRAM and the bank array against reference arrays;
* address generation against the mapping formulas;
* patch selection against patches cut directly from random images;
* the layers against integer arithmetic;
* the controllers against cycle models.
