# Mirror-symmetry detection by spike coincidence: an 8x8 LIF network in RTL

A point lies on a mirror axis of a set of points when two (or more) of them are at the same
distance from it. This design finds such points with spiking neurons and delays instead of
arithmetic. All active input neurons fire in the same clock cycle. Each spike travels to every
output neuron through a delay line whose length grows with the distance between the two points.
Spikes from inputs that are equally far from an output neuron therefore reach it in the same cycle.
An output neuron is a leaky integrate-and-fire (LIF) accumulator whose threshold is just above what
one spike gives, so it fires only on such a coincidence. The pattern of output neurons that fire is
a map of the points of mirror symmetry ("symmetry density") of the input.

The RTL follows the FPGA network of the paper "Identifying Mirror Symmetry Density with Delay in
Spiking Neural Networks" (George, Soci, Sorger). That network has an 8x8 input array, an 8x8 output
array and the Manhattan metric. It uses 4096 shift registers of at most 16 stages and completes one
symmetry operation every 18 clock cycles, which is about 2.8 million operations per second at
50 MHz. The design adds the paper's synchronization layer, which makes the output usable by a
further layer or as feedback to the input. Widths, reset values, the register map and the exact
cycle alignment are choices of this implementation. They are marked below and in each file's header.

## The computation

For an output point `o` and a binary image `P`, build the histogram of Manhattan distances
`|ox - px| + |oy - py|` over the active pixels `p`. A bin that holds two or more pixels means `o` is
equidistant from at least two of them. The detector computes, for every `o` at once:

    fired(o) = some distance bin of o holds at least 2 active pixels   (reset configuration)

This is the histogram-threshold algorithm with the threshold at 2 pixels per bin. In hardware the
distance becomes a delay and the bin becomes one clock cycle at the output neuron:

* the spike from input `i` reaches output `o` after `manhattan(o, i) + 2` cycles;
* in each cycle the neuron adds the number of spikes that arrive, subtracts the leak and compares
  the result with the threshold.

Spikes of one bin arrive in the same cycle and add up. Spikes of different bins arrive in different
cycles, and the leak removes each of them before the next one comes. With a leak of 1 and a
threshold of 0, one spike leaves 0 and the neuron does not fire. Two coincident spikes leave 1, and
the neuron fires. Other settings of threshold and leak give other sensitivities, for example a
coincidence of three or more spikes, or a window of more than one cycle. The cycle-level rule is
given under "Output neuron".

Two examples on the 8x8 grid, both checked by the testbenches: two points at (7,0) and (7,6) light
exactly row 3, the mirror line between them. The four corners light the two diagonals. The
Manhattan metric favours axis-parallel and diagonal lines. Two points an odd distance apart have
no exactly equidistant grid point, and they light nothing in the reset configuration.

## Block structure

```
                          ┌──────────── output coincidence_layer ─────────────┐
 pixels[64] ► input_layer ► in_spikes ► delay_matrix ► lif_neuron x64 ──────────┼──► fire[64], acc[64]
                ▲     ▲                 (4096 shift registers)  ▲ leak, threshold│      │
                │     │ tick                                   lif_config       │      ├──► symmetry_map ► trace, map, map_valid
 period_timer ──┴─────┴───────────── tick ─────────────────────────────────────────► sync_layer
                │                                                                      │ sync_spikes[64]
                └──── feedback (when enabled) ◄────────────────────────────────────────┤
                                                                                       ▼
                                          higher coincidence_layer (same structure) ──► hi_fire[64], hi_acc[64]
```

| Module | Role |
|---|---|
| `sym_pkg` | Sizes, the `manhattan()` and `conn_delay()` functions, the configuration struct `cfg_t` and the address enum |
| `period_timer` | 18-cycle period counter; `tick` in the last cycle of each period |
| `input_layer` | 64 input neurons: `pixel > pix_thr` fires on `tick`; feedback spikes are ORed in |
| `delay_line` | One connection: single-bit shift register of `LEN` stages |
| `delay_matrix` | 64 x 64 `delay_line`s, `LEN = manhattan(o,i) + 2` (2 to 16) |
| `lif_neuron` | Two-stage adder, leaky accumulator, threshold, one-bit fire register |
| `coincidence_layer` | A `delay_matrix` and 64 `lif_neuron`s: one symmetry-detecting layer (used twice) |
| `lif_config` | Threshold, leak, pixel threshold and feedback-enable registers |
| `symmetry_map` | One set-on-fire bit per output neuron (`trace`), and the completed map of each operation (`map`, `map_valid`) |
| `sync_layer` | Slow-leak neurons that hold the period's output spikes and release them together |
| `symmetry_snn_top` | Connects the above |

Each coincidence layer has 29,696 shift-register flip-flops, the sum of `manhattan + 2` over all
4096 pairs, plus 41 per neuron. The output layer alone is the paper's FPGA network. The higher layer
doubles the size, to about 65,000 flip-flops for the whole top.

## Timing of one symmetry period

The phase counter runs 17, 0, 1, ..., 17, 0, ... while `run` is high. The first `tick` (phase 17)
comes in the first cycle after `run` rises.

| Phase | Event |
|---|---|
| 17 (`tick`) | the input layer samples `pixels`; the sync layer adds the timing pulse |
| 0 | `in_spikes` high for one cycle (and `sync_spikes`, which are fed back, in the same cycle) |
| d + 2 | spikes from inputs at distance d reach the neuron (`delayed`) |
| d + 3 | partial spike counts registered (adder stage 1) |
| d + 4 | `acc` updated and `fire` set (stage 2); the bit is ORed into `trace` |
| 18 (= phase 0 of the next period) | last possible fire of the operation (d = 14) |
| 19 (= phase 1 of the next period, 20 cycles after the tick) | `map` holds the operation's symmetry map, `map_valid` high for one cycle |

So a coincidence at distance d shows on `fire` d + 4 cycles after `in_spikes`. The longest
connection (d = 14, corner to corner) gives 18 cycles: 16 for the shift register and 2 for the
accumulation, as in the paper. A new image can be presented every 18 cycles. Every spike has left
the delays before the next period's spikes enter, so in the reset configuration, where no charge
outlives a cycle without firing, successive operations do not interfere. With a small leak and a
high threshold an accumulator can carry charge into the next operation; the hardware does not
clear it between operations.

`trace` is the live view: during an operation it fills in the symmetry points in order of their
distance from the inputs, so a mirror line is drawn from its near end to its far end. `map` is the
finished result. Because operations overlap by one cycle, `trace` is cleared in the cycle when the
next operation's spikes enter the delays, and that cycle's fire bits go to the previous map. A
result is still delivered after `run` drops, because a shift register of tick pulses tracks the
operations in flight.

A d = 14 result appears in phase 0 of the next period, one cycle after that period's tick. The sync
layer therefore stores it and releases it one period later than the rest. This is a corner case of
this implementation's alignment. It concerns only an output neuron equidistant at 14 from two
inputs, which cannot happen on an 8x8 grid: only one point is at distance 14 from a corner.

## Output neuron (`lif_neuron`)

In each cycle, with `partials` the spike counts registered in the previous cycle:

    sum  = acc + Σ partials - leak            floored at 0, saturated at 255
    if sum > threshold:  acc <= 0,   fire <= 1
    else:                acc <= sum, fire <= 0

The paper gives the two-stage adder, the accumulation register, the constant configurable leak, the
threshold (fixed or in a register), the clearing of the accumulator on firing and the one-bit fire
register. This design chose the rest: unit spike weight, 8 groups of 8 inputs in the first adder
stage, an 8-bit accumulator, the floor at 0, saturation, and "surpasses" read as strictly greater
on the value after the leak. Because the leak is subtracted before the comparison, the reset
configuration that makes a two-spike coincidence detector is threshold 0 with leak 1.

## Synchronization layer and feedback (`sync_layer`)

Output spikes leave the output layer at times that depend on the data, so a second
coincidence-detecting layer cannot use them directly. Each synchronization neuron stores a spike
as charge 4 and loses 1 every 8 cycles, much more slowly than the output layer. The period's tick
adds 4 to every neuron, and a neuron fires when its charge exceeds 4. A neuron therefore fires only
if it holds a spike at the tick. A spike stored less than 32 cycles earlier survives to the tick,
which is always true within one 18-cycle period. The tick empties every neuron. The released
spikes go to the higher coincidence layer, which is built like the output layer and shares its
threshold and leak. It receives all symmetry points of an operation in one cycle, exactly as the
output layer receives the input spikes, and so finds the symmetry points of the symmetry points
(`hi_fire`, `hi_acc`). It works one period behind the output layer. When the feedback bit is set,
the released spikes also enter the input layer together with the image spikes of the next
period. The next operation then acts on the
data plus the symmetry points already found. Repeating this gives the hierarchical pattern of
symmetry points of symmetry points.

The paper describes this layer, the higher layer and the feedback in principle. Its FPGA
demonstration is a single layer. The weights, the leak interval, the limit of one stored spike per neuron and the emptying at
the tick are choices of this design.

## Configuration (`lif_config`)

Write with `cfg_we`, `cfg_addr`, `cfg_wdata`. `cfg_rdata` shows the register at `cfg_addr`.

| Address | Register | Reset |
|---|---|---|
| 0 `CFG_THRESHOLD` | output-neuron threshold (8 bits) | 0 |
| 1 `CFG_LEAK` | leak per cycle (8 bits) | 1 |
| 2 `CFG_PIX_THR` | input activation threshold: pixel fires if `pixel > pix_thr` | 0 |
| 3 `CFG_CONTROL` | bit 0: feedback from the sync layer into the input layer | 0 |

The pixel threshold is the way the paper suggests to reject noise: include a pixel only if it
exceeds a threshold, such as the image mean. The register map itself is this design's own.

## Departures from the paper and limits

* Delay length is `manhattan + 2`. The paper says "proportional to the Manhattan distance" with a
  maximum of 16, and 16 = 14 + 2 on an 8x8 grid.
* Every output connects to every input, including the one at its own point: 4096 connections, as
  the FPGA description states. The general description mentions N² − 2N connections instead.
* The paper does not state the leak and threshold used in its FPGA run with two source points.
  With integer spikes the reset configuration detects exact coincidences only, so two points an
  odd distance apart give no firing line. Threshold and leak are registers and can be set
  differently.
* The paper's FPGA description has one bit per neuron that is "set to 1" on firing, while its
  general neuron description has a one-cycle output. Both are here: `fire` is the one-cycle
  output, and `trace`/`map` hold the set bits of one operation. Clearing them per operation is
  this design's choice.
* Pixels enter by thresholding only. Weighting coincidences by pixel value, the paper's other way
  of handling grey-level input, is not built.
* Only the Manhattan metric is built, as on the FPGA. The Euclidean examples and the MNIST studies
  (28 x 28 images) were software runs in the paper and do not fit an 8x8 array.
* The separation of two input sets by a pseudorandom delay code is not built. The paper does not
  give the code.
* The alternative delay representation with a countdown register per connection is not built. The
  FPGA uses shift registers.
* How the FPGA received its images and read out its arrays is not described. The top has a
  parallel pixel input, a small register port, and the `acc`, `fire`, `trace` and `map` arrays as
  outputs.
* The higher layer is one more layer of the same kind as the output layer. The paper gives no
  details of it. It has no synchronization layer of its own, so the stack ends there.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/sym_pkg.sv tb/symmetry_snn_top_tb.sv --top-module symmetry_snn_top_tb
./obj_dir/Vsymmetry_snn_top_tb
```

| Testbench | What it checks |
|---|---|
| `symmetry_snn_top_tb` | Whole design at full size. A cycle model of all 4096 connections and 64 neurons of both layers is compared every cycle, and input-layer and sync-layer behaviour is checked. Also: latency d + 4 (18 corner to corner), one operation per 18 cycles, the mirror line of two points, feedback, saturation, leak floor, stop/restart. Each mechanism must occur. |
| `algorithm1_workload_tb` | Images streamed one per 18-cycle period; each result map must equal the distance-histogram result (bin ≥ 2) for two-point, four-corner, square, T-shape and 30 random images, one result per 18 cycles. The higher layer's fires must equal the histogram result of the previous map. |
| `coincidence_layer_tb` | Each neuron fires at exactly t0 + d + 4 for each distance d that holds two or more of the inputs, and at no other time |
| `symmetry_map_tb` | Trace and map windows against random fire bits, including a skipped operation |
| `delay_matrix_tb` | Arrival time of every one of the 4096 connections |
| `lif_neuron_tb` | Coincidence behaviour and a random comparison with a cycle model |
| `sync_layer_tb`, `input_layer_tb`, `period_timer_tb`, `lif_config_tb`, `delay_line_tb` | Each block alone |

The full-size end-to-end test runs in well under a second after a compile of about 15 s.

To change the grid size, edit `GRID` in `sym_pkg`. `MAX_DELAY` and `PERIOD` follow from it.
`DELAY_SCALE` stretches all delays, which widens the time separation between distance bins. The
top-level testbenches take the grid size from the package. They assume the default scale and
offset (delay = distance + 2) and the 18-cycle corner-to-corner latency, so change those checks
along with the package.
