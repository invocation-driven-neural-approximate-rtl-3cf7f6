# MCMA neural processing unit: one multiclass classifier, several approximators

Neural approximate computing replaces a costly, error-tolerant function (an
option pricer, an inverse-kinematics solve, a Sobel filter) with a small
multilayer perceptron, the *approximator*, that runs on an accelerator instead
of the CPU. A second network, the *classifier*, decides per input whether the
approximator's answer would stay within the error bound; inputs it rejects go
back to the CPU. The benefit grows with the *invocation*, the fraction of
inputs the accelerator handles.

One approximator fitted to the whole input space tends to be accurate only on
part of it. The MCMA scheme (Multiclass classifier, Multiple Approximators)
trains several approximators of the *same topology*, each specialised on its
own region of the input space, plus one classifier with `n + 1` outputs: "use
approximator *i*" for each *i*, and "use the CPU". At run time the classifier
runs first, the largest of its outputs picks the approximator, and only that
approximator runs. Because all approximators share one topology, they share
the same processing elements; switching between them only means using other
weights.

This repository holds synthesizable SystemVerilog for that NPU: a classifier
tile, an approximator tile and the controller between them, with three
approximators (`N_APPROX = 3`). Training the networks (complementary and
competitive allocation of training samples) is offline software and is not
part of the hardware.

## How a sample flows through the NPU

```
             in_valid/in_data                                   out_valid/out_word
host ──────┬──────────────────────────────┐                         ▲
           ▼                              ▼                         │
   ┌─ classifier tile ─────────┐   ┌─ approximator tile ─────────────┴─┐
   │ input FIFO → PEs → out FIFO│   │ input FIFO   PEs   output FIFO    │
   └─────────────────┬─────────┘   └──────▲────────────────────────────┘
                     │ N_APPROX+1 words    │ command: run approximator i,
                     ▼                     │ or drop the sample (CPU)
                 mcma_controller ──────────┘
```

1. Every input word the host sends is written into the input FIFOs of *both*
   tiles (`in_ready` is low if either is full).
2. The classifier tile evaluates the classifier network and leaves its
   `N_APPROX + 1` outputs (sigmoid values, one word each, the last marked) in
   its output FIFO.
3. The controller reads them and keeps the largest; ties go to the lower
   index. Outputs 0..`N_APPROX-1` mean approximators A1..An, the last output
   means "CPU".
4. The controller sends one command per sample to the approximator tile.
5. For "run approximator *i*", the approximator tile points its PEs at the
   weights of approximator *i*, first loading them if they are not in the PE
   weight buffers (see below), then evaluates the sample.
6. The results go to the approximator tile's output FIFO, which is the output
   of the NPU: `out_word = {cpu, last, sel, data}`, one word per network output,
   with `sel` naming the approximator. For "CPU" the tile drops the sample's
   input words and emits one word with `cpu = 1`; the host, which still has
   the inputs, computes that sample itself.

Results leave in input order. The two tiles overlap: the classifier works on
sample *k+1* while the approximator tile works on sample *k*. The controller
also counts how many samples went to each approximator (`n_invoked`) and to
the CPU (`n_cpu`), which is the invocation statistic directly.

## Tiles, PEs and the internal bus

Both tiles are the same module, `npu_tile`: an input FIFO, an output FIFO, a
weight cache, a bus scheduler and `NUM_PE = 8` processing elements. The
classifier tile is built with one network (`N_NETS = 1`), the approximator
tile with `N_APPROX`.

A PE (`npu_pe`) computes one neuron at a time, `sigmoid(Σ w_k x_k + b)`. Its
datapath is: weight buffer → fetch unit → W register, bus → I register, both
into a multiply-accumulate unit with its accumulator register, then the
sigmoid unit and an output register. The bus scheduler (`bus_scheduler`) runs
a network layer by layer:

* The `M` neurons of a layer are dealt round-robin to the PEs, `NUM_PE` at a
  time: group *g* holds neurons `g·NUM_PE … g·NUM_PE + NUM_PE − 1`.
* For each group the scheduler broadcasts the layer's `K` inputs and then the
  constant 1.0 for the bias, one word per cycle. Every PE multiplies each word
  by the next weight of its own buffer.
* A PE's result appears three cycles after the last (bias) term. Groups are
  issued back to back; the scheduler collects each group's results into a
  second activation array, which becomes the input of the next layer.
* After the last layer the `M` outputs are pushed to the output FIFO, one per
  cycle.

Per sample, for layers with `K_l` inputs and `M_l` neurons, the first result
word is visible at the output FIFO

    2 + size[0] + Σ_l ( 5 + ceil(M_l / NUM_PE) · (K_l + 1) )

cycles after the tile accepts the command, if the input is already queued and
no weights need loading. (`size[0]` cycles to read the input; per layer one
set-up cycle, the issue cycles and a four-cycle drain.) The testbenches check
this count.

## Keeping approximator weights next to the MACs

This part holds most of the design's intent. The point of MCMA hardware is
that choosing another approximator should cost (almost) nothing. That depends
on whether the approximators' weights fit into the PE weight buffers
(`WB_DEPTH = 512` words per PE). The scheduler looks at the topology when
`start` is pulsed and picks one of three cases. It reports the choice on
`wcase` (`apx_wcase` at the top):

| case | condition (`L` = weight words per PE for one network) | what a switch costs |
|---|---|---|
| 1, `WS_ALL_RESIDENT` | `N_NETS · L ≤ WB_DEPTH` | nothing. All networks are loaded at start, side by side; approximator *i* starts at buffer address `i · L`, and switching only loads another start address into every PE's fetch unit. |
| 3, `WS_RELOAD` | `L ≤ WB_DEPTH < N_NETS · L` | one network stays resident. If a sample selects a different approximator than the resident one, its `L` lines are copied from the cache first (`L` + 2 cycles); consecutive samples for the same approximator and CPU samples cost nothing. |
| 2, `WS_LAYERWISE` | `L > WB_DEPTH` | every layer is loaded into the buffers just before it runs, for every sample, as any NPU must do for a network this large. |

The case numbers follow the original published numbering, which is why case 3 sits
between 1 and 2 in the table. A single layer that does not fit in `WB_DEPTH`,
or networks that do not fit in the cache, raise `cfg_err`, and the tile does
not start.

The weights of all networks sit in the tile's weight cache (`weight_cache`),
which the host writes before `start`. A cache line is `NUM_PE` words wide and
word *p* of a line belongs to PE *p*, so a buffer refill moves one weight into
every PE each cycle. The layout, which the host must follow, is:

* network *n* starts at line `n · L`, with `L = Σ_l ceil(M_l / NUM_PE) · (K_l + 1)`;
* within a network, layers come in order. Within a layer, groups come in
  order, and within a group the `K_l + 1` lines hold the weights for inputs
  `0 … K_l − 1` and then the bias;
* word *p* of the line for group *g*, input *k* is the weight from input *k* to
  neuron `g · NUM_PE + p`, or zero if that neuron does not exist.

Because the weight buffers are filled in exactly the order the PEs consume
them, a fetch unit (`fetch_unit`) is only a start address plus a counter.

## Number format and activation

Words are 16-bit two's complement with 8 fraction bits (range ±128,
resolution 1/256). Products and sums are 32 bits with 16 fraction bits and
wrap on overflow. The sigmoid (`sigmoid_unit`) is the piecewise-linear PLAN
approximation, using only shifts and adds:

| `|x|` | `sigmoid(|x|)` |
|---|---|
| `≥ 5` | 1 |
| `2.375 … 5` | `|x|/32 + 0.84375` |
| `1 … 2.375` | `|x|/8 + 0.625` |
| `< 1` | `|x|/4 + 0.5` |

For negative `x` the result is `1 − sigmoid(|x|)`. It is truncated to 8
fraction bits. Every layer, the output layers included, goes through the
sigmoid. Network outputs are therefore in [0, 1], and the approximators must
be trained on outputs scaled to that range. The classifier's decision is
unaffected, because the sigmoid preserves order.

## Using the top module

`mcma_npu_top` parameters: `NUM_PE = 8`, `WB_DEPTH = 512`, `CACHE_LINES = 4096`,
`FIFO_DEPTH = 64`. Shared constants (`N_APPROX`, word width, `MAX_LAYERS = 3`,
`MAX_NEURONS = 64`) are in `mcma_pkg`.

1. Hold the NPU idle and write the weight images into the caches, one line
   per cycle: `cw_we`, `cw_tile` (0 = classifier, 1 = approximators),
   `cw_addr`, `cw_data[NUM_PE]`.
2. Drive `cls_topo` and `apx_topo` (`topo_t`: `n_layers` weight layers and
   `size[0..n_layers]`, where `size[0]` is the input count). The classifier's
   last layer must have `N_APPROX + 1` neurons. Both networks must take the
   same inputs.
3. Pulse `start`. Wait for `ready` (or `cfg_err`). `cfg_err` is raised when a
   network does not fit, when the classifier's last layer is not
   `N_APPROX + 1` wide, or when the two networks have different input counts.
4. Stream samples: `size[0]` words each on `in_valid`/`in_data`, honouring
   `in_ready`. Collect results on `out_valid`/`out_word`/`out_ready`.

A new `start` reconfigures the NPU. Give it only when both tiles are idle,
with every result drained. The `ev_reload`, `ev_layer_load` and `ev_switch`
pulses mark a case-3 reload, a case-2 layer load and a change of approximator
between consecutive samples.

## What fits

The sizes below are those of the eight benchmarks the scheme was evaluated on.
`L` is the number of weight words per PE for one network, with 8 PEs.

| benchmark | approximator | classifier | `L` approx. (×3) | case |
|---|---|---|---|---|
| Black-Scholes | 6-8-1 | 6-8-4 | 16 (48) | 1 |
| FFT | 1-2-2-2 | 1-2-4 | 8 (24) | 1 |
| inversek2j | 2-8-2 | 2-8-4 | 12 (36) | 1 |
| jmeint | 18-32-16-2 | 18-16-4 | 159 (477) | 1 |
| JPEG | 64-16-64 | 64-16-4 | 266 (798) | 3 |
| k-means | 6-8-4-1 | 6-8-4-4 | 21 (63) | 1 |
| Sobel | 9-8-1 | 9-8-4 | 19 (57) | 1 |
| Bessel | 2-4-4-1 | 2-4-4 | 13 (39) | 1 |

All of them fit the default configuration. Only JPEG needs reloads when the
approximator changes. Case 2 is exercised in the tests with a 64-56-64
network.

## Where this RTL departs from, or adds to, the published scheme

Following the published description: tiles built from PEs, FIFOs, a cache and
a bus scheduler; a PE that computes one neuron at a time through weight
buffer, fetch unit, W and I registers, MAC, accumulator and sigmoid; a
controller that turns the classifier's highest-confidence output into an
approximator choice or a CPU fallback; the three weight-switch cases; three
approximators with classifiers of four outputs.

Choices made here, where the description gives no detail:

* number format, sigmoid circuit, all buffer, FIFO and cache sizes, and the
  PE count (8, as in the NPU design the scheme builds on);
* round-robin mapping of neurons to PEs, bias as a final input of 1.0, the
  activation arrays in the scheduler, and the cache layout;
* the controller's tie rule, the order of classifier outputs, and the
  command and result formats, including the single-word CPU marker;
* the host interface: cache write port, topology inputs and `start`. The
  link to the CPU and DMA is left as plain ports.

Differences to be aware of:

* The published NPU figure shows a stack of identical tile pairs. This RTL
  builds one classifier tile and one approximator tile, and the assignment of
  networks to tiles is fixed rather than dynamic.
* The PE figure shows a small output FIFO and several accumulator registers
  per PE. Here each PE has one accumulator and one output register, which is
  enough because the scheduler collects every result in the cycle it appears.
* The scheme is advertised as switching approximators "within a cycle". Here
  that holds for case 1, where a switch costs no cycles at all. In case 3 a
  reload costs one cycle per cache line, as the published case analysis
  itself describes.
* The cache is an on-chip SRAM written by the host, with no miss handling.
* The cascaded MCCA variant, which is only compared against, is not built.

## Files

`rtl/` (one module or package per file):

| file | block |
|---|---|
| `mcma_pkg.sv` | types and constants |
| `mcma_npu_top.sv` | the NPU: two tiles and the controller |
| `mcma_controller.sv` | classifier decision → command, invocation counters |
| `npu_tile.sv` | one tile |
| `bus_scheduler.sv` | tile sequencer, weight-switch cases |
| `weight_cache.sv` | tile weight store |
| `npu_pe.sv` | processing element |
| `weight_buffer.sv`, `fetch_unit.sv`, `mac_unit.sv`, `sigmoid_unit.sv` | PE parts |
| `sync_fifo.sv` | input and output FIFOs |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`), plus:

* `tb_mcma_workloads.sv`, which runs the eight benchmark topologies through
  the top;
* `tb_ref_pkg.sv`, an independent integer model: sigmoid, network evaluation
  and cache-image layout.

The weights are random, because trained networks are not part of this
design. What the tests establish is exact agreement with the reference model
and with the cycle schedule, not approximation quality. `tb_mcma_npu_top`
runs the default-size design through all three weight-switch cases. It
counts each mechanism (every approximator invoked, CPU fallback, approximator
switch, case-3 reload, case-2 layer load, input stall, output back-pressure)
and fails if any never happened. It also checks that a classifier with the
wrong number of outputs is refused. Every testbench prints
`TB_RESULT checks=N failures=M`.

Simulating with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/mcma_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_mcma_npu_top.sv \
  --top-module tb_mcma_npu_top -Wno-fatal
./obj_dir/Vtb_mcma_npu_top
```

Replace the testbench name for any other test. The top-level test takes
about half a minute to build and run. Nothing reads external files: the
testbenches generate their weights and inputs.
