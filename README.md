# A 20×20×2 perceptron as a level-1 trigger for a large liquid-scintillator detector

A large liquid-scintillator neutrino detector, with about 18,000 large PMTs, has to make a level-1
trigger decision at a steady rate. Each PMT's dark noise produces random hits. A fixed threshold
on the number of fired PMTs must be set high to suppress coincidences of those hits, and so it
loses low-energy events (about 120 hits for a 100 keV electron, against 100 to 240 dark-noise hits
in the same window). This design replaces that threshold with a small neural network. It looks at
the *time profile* of the hits, not just their total. The central trigger receives one number
per clock cycle, the count of PMTs that fired in that cycle. The network takes the counts of 20
consecutive cycles (a 320 ns window at 16 ns per cycle). It decides whether they look like a real
scintillation event on top of dark noise or like dark noise alone.

The RTL is a fully parallel, fully pipelined implementation of that network. It has 440 signed
multipliers (one per weight), 22 adder trees and a comparator. It takes a new 20-sample window
on every clock and gives each decision a fixed 16 clock cycles later. That is 128 ns at 125 MHz,
well inside the 600 ns the trigger allows.

## The network and its number format

```
 20 inputs  ──►  20 hidden neurons (ReLU)  ──►  2 output neurons  ──►  accept = out[1] > out[0]
 8-bit hits      y = max(0, Σ w·x + b)          y = Σ w·h + b
```

* **Inputs**: 20 hit counts, 8-bit two's complement each (0..127 in use). Input *i* is the count
  of clock cycle *i* of the window, with *i* = 0 the earliest.
* **Weights and biases**: 12-bit two's complement integers, 21 per neuron (20 weights, 1 bias).
  There are 462 in all. In software the trained network keeps its accuracy down to 6-bit
  parameters. 12 bits leaves headroom and matches the DSP multiplier ports.
* **Hidden layer**: 20 neurons, each 20 multiplies plus the bias, then ReLU. The ReLU only
  looks at the sign bit.
* **Output layer**: 2 neurons without activation. Neuron 0 scores "dark noise" (training
  label 0) and neuron 1 scores "signal" (label 1).
* **Decision**: the trained network ends in a softmax read at 0.5. Softmax is monotonic, so
  that is the same as asking which raw output is larger. No exponential is computed. The event
  is accepted when `out[1] > out[0]`, strictly: a tie is rejected.

No precision is dropped anywhere. Each layer's sums are wide enough that no input and no 12-bit
weight can overflow them:

| value                     | width | why                                   |
|---------------------------|-------|---------------------------------------|
| hidden product            | 20    | 8 × 12 bits                           |
| hidden sum / activation   | 25    | + 5 adder-tree levels (fits a DSP's 25-bit port) |
| output product            | 37    | 25 × 12 bits                          |
| output sum                | 42    | + 5 levels                            |

All arithmetic is on integers. The biases are added at the same LSB as the products. If the
trained weights are scaled by *s* to become integers, the hidden biases must therefore be scaled
by *s* and the output biases by *s²*. An output bias that does not fit in 12 bits after that
scaling cannot be represented. Rescaling a whole layer by a positive factor changes neither the
ReLU nor the comparison, so each layer may use its own scale.

## The parameter constant

All 462 parameters live in one 5544-bit constant, the `PARAMS` parameter of the top (type
`mlp_pkg::params_t`). To retrain the trigger, change that constant and rebuild. Field *k* is
12 bits wide and sits at bits `[12k+11 : 12k]`:

| neuron                 | field index *k*           | content                          |
|------------------------|---------------------------|----------------------------------|
| hidden *n* = 0..19     | 21·n + i                  | i = 0..19: weight of input i; i = 20: bias |
| output *m* = 0..1      | 420 + 21·m + i            | i = 0..19: weight of hidden neuron i; i = 20: bias |

So the hidden layer occupies the low 5040 bits and the output layer the top 504 bits.
`mlp_pkg::hidden_idx(n,i)` and `output_idx(m,i)` give the field index. The split into a
5040-bit hidden part and a 504-bit output part follows the reference implementation. The
order inside each part is this design's choice.

**The default constant is not a trained network.** The trained weights were not published.
`mlp_pkg::DEFAULT_PARAMS` is a stand-in that turns the network into a plain multiplicity
trigger. Hidden neuron 0 sums the 20 counts. The signal neuron copies it. The noise neuron is
a constant 250 (`DEFAULT_THRESHOLD`). Every other parameter is zero. With the default, the
design accepts a window that holds more than 250 hits. This lets the top run and be tested
out of the box. Use real weights for physics.

## Pipeline and timing

Every arithmetic element is registered. There are no handshakes: a new window may enter on
every clock, and a `valid` bit runs beside the data so that gaps are allowed.

```
edge  0      event memory read (or last sample shifted into the live window)
edges 1-3    hidden multipliers: operand reg → product reg → output reg   (3)
edges 4-8    hidden adder tree: 16, 8, 4, 2, 1 adders                       (5)
             ReLU (combinational, sign bit) on the tree output
edges 9-11   output multipliers                                             (3)
edges 12-16  output adder tree                                              (5)
             comparison (combinational) → l1_accept, l1_valid
```

* **Multiplier** (`dsp_mult`): three register stages, as a DSP48 slice is configured. It
  multiplies any two signed widths. Synthesis tools map it onto one DSP block each, so there
  are 440 in all.
* **Adder tree** (`adder_tree`): 32 leaves. The 20 products and the bias use 21 of them and the
  other 11 are zero. Five levels of two-input adders, each level registered. Each level is one
  bit wider than the one before. The bias is delayed three cycles so that it meets the products
  of the same window.
* **Latency**: the first decision appears on the 16th clock edge after the edge that first
  sees `enable` high, i.e. 16 clock periods. That is 128 ns at 125 MHz, the figure measured on
  the reference hardware. At the 62.5 MHz system clock it would be 256 ns. The comparison and
  the ReLU are combinational so that the pipeline is exactly 3 + 5 + 3 + 5 registers.
* **Probes**: `hidden_probe` (20 × 25 bits) and `output_probe` (2 × 42 bits) bring out all 22
  neuron values for in-system debugging. They are pipeline taps: the hidden values on the port
  belong to the window 8 cycles younger than the output values beside them.

## Feeding the network

`l1_trigger_top` has two sources, selected by `live_mode`.

**Stored events** (`live_mode = 0`) are the configuration used to measure the trigger's rate
and latency on the bench. `event_mem` holds 500 windows of 20 × 8 bits (160 bits each, hit *i*
in bits `[8i+7:8i]`). It has a write port (`wr_en`, `wr_addr`, `wr_data`) and a synchronous
read port, so it maps onto block RAM. When `enable` goes high, `event_ctrl` reads address 0 on
that same clock edge and then one address per clock. That gives 500 decisions on 500
consecutive clocks. After the run it ignores `enable` until `enable` has been low, so a
periodic enable pulse replays the set once per pulse. Dropping `enable` during a run aborts it,
and the next run starts again at event 0. `run_busy` is high during a run.

**Live stream** (`live_mode = 1`) is what the trigger sees in the detector. `hit_window` shifts
each `nhit` (one per `nhit_valid`) into a 20-sample window. Once 20 samples have arrived since
reset, it presents every new window to the network, so there is one decision per sample, 16
cycles after that sample. This source is an addition of this design: the reference
implementation was only measured from stored events. Change `live_mode` only when no decision is
in flight.

## Top-level ports

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; active-low asynchronous reset (control and valid bits only) |
| `enable` | in | 1 | start a 500-event run (stored mode) |
| `live_mode` | in | 1 | 0: stored events, 1: live stream |
| `nhit_valid`, `nhit` | in | 1, 8 | live fired-PMT count of one clock cycle |
| `wr_en`, `wr_addr`, `wr_data` | in | 1, 9, 160 | load the event memory |
| `l1_accept` | out | 1 | level-1 accept; 0 whenever `l1_valid` is 0 |
| `l1_valid` | out | 1 | a decision is on `l1_accept` |
| `run_busy` | out | 1 | a stored-event run is in progress |
| `hidden_probe`, `output_probe` | out | 20×25, 2×42 | neuron values |

Parameters: `PARAMS` (5544 bits, see above) and `N_EVENTS` (500).

## Files

| file | content |
|------|---------|
| `rtl/mlp_pkg.sv` | sizes, widths, types, parameter layout helpers, default constant |
| `rtl/dsp_mult.sv` | 3-stage signed multiplier |
| `rtl/adder_tree.sv` | registered binary adder tree |
| `rtl/relu.sv` | sign-bit ReLU |
| `rtl/neuron.sv` | multipliers + bias + tree (+ ReLU) |
| `rtl/trigger_decision.sv` | signal-versus-noise comparison |
| `rtl/mlp_core.sv` | 20 + 2 neurons sliced from `PARAMS`, decision |
| `rtl/event_mem.sv` | 500 × 160-bit event store |
| `rtl/event_ctrl.sv` | replay sequencer |
| `rtl/hit_window.sv` | live 20-sample window |
| `rtl/l1_trigger_top.sv` | top level |
| `tb/mlp_ref_pkg.sv` | integer reference model and a pseudo-random parameter generator |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_l1_trigger_full` |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops, and each has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mlp_pkg.sv tb/mlp_ref_pkg.sv \
          tb/tb_l1_trigger_top.sv --top-module tb_l1_trigger_top -Mdir obj
./obj/Vtb_l1_trigger_top
```

Any other testbench builds the same way. The packages must come first on the command line,
and `-Irtl -Itb` lets Verilator find the modules.

* Each block's testbench compares the block with values computed directly in the testbench
  and checks the block's latency: products (3 cycles), tree sums (5), ReLU edge values, the
  strict comparison, neurons with weights, bias and inputs changing every clock (8 cycles),
  memory contents, the replay address sequence with abort and rearm, and the window contents.
* `tb_mlp_core` and `tb_l1_trigger_top` use a pseudo-random weight set (6-bit range) so that
  both decisions and ReLU clipping really occur. They check every decision and all 22 probes
  against the integer reference model, and the 16-cycle latency. The top-level test also covers
  a full run, enable held high after a run, an aborted run and the live stream. It counts each
  of these and fails if one never happened.
* `tb_l1_trigger_full` runs the top exactly as built, with the default parameter constant. It
  loads 250 dark-noise windows (100 to 240 hits spread uniformly over the 20 cycles) and 250
  windows with a 120-hit pulse added. It raises `enable` once and checks 500 decisions on 500
  consecutive clocks, 16 cycles after `enable`.

Simulation only checks cycle behaviour. Timing closure at 125 MHz and the number of DSP blocks
used depend on the FPGA tools and were not checked here.

## How far this follows the reference implementation

Taken from it: the 20×20×2 topology, with ReLU in the hidden layer and softmax replaced by a
comparison. The 12-bit parameters and 8-bit inputs. One 5544-bit constant, with the hidden
layer in the first 5040 bits. One multiplier per weight with 3 pipeline stages. A 32-input,
five-level registered adder tree. 500 stored events of 160 bits replayed on an enable. The
16-cycle latency.

This design's own choices:

* the order of fields inside the constant;
* the default weights (a multiplicity stand-in);
* the full-precision widths and the bias alignment;
* the valid bit;
* the enable and rearm protocol;
* the memory write port;
* which registers form the three multiplier stages;
* combinational ReLU and comparison (chosen so the latency comes out at 16);
* the live-stream window and its mux.

Not included: the FPGA's I/O and clock buffers, the on-chip logic analyser used to read the
neuron values (the probe ports stand in for it), and everything outside the trigger FPGA.
Only the one-hidden-layer, 20-neuron network is built. A 20×10×2 network can be loaded by
zeroing ten hidden neurons. A 20×30×2 or two-hidden-layer network needs changes to `mlp_pkg`
and `mlp_core`.

The reference implementation's documentation disagrees with itself about the event store. It
is described as a block RAM, yet block RAM use is listed as zero. This design uses a
synchronous-read memory, which maps onto block RAM.
