# DSAE fuel-cell health classifier core

The high-frequency resistance (HFR) of a PEM fuel-cell stack is a good
indicator of its health, but measuring it on line needs impedance
spectroscopy equipment. This core estimates it instead: from ten ordinary
operating measurements of the stack it predicts into which of three HFR bands
the stack currently falls. The network was trained offline as a deep sparse
auto-encoder (a multilayer perceptron trained with a KL-divergence sparsity
penalty on its hidden neurons). Only the trained network, used for inference,
is hardware.

| class | HFR band       |
|-------|----------------|
| 0     | below 89 mΩ    |
| 1     | 89 to 91 mΩ    |
| 2     | 91 mΩ and above |

The ten inputs are stack output power, current density, stack voltage, the
variance of the single-cell voltages, outlet water temperature, hydrogen
inlet pressure, hydrogen proportional-valve current, hydrogen recirculation
pump power, air inlet pressure and air flow. The host scales them to signed
integers before sending them. The published sample vectors lie in
−512…511, and that range is what the testbenches use.

The RTL describes an inference core of the same shape as the published
FPGA implementation: a free-running AXI4-Stream accelerator with one input
stream and two output streams. On the device it sits between two AXI DMA
engines of a Zynq-7020 running at 100 MHz. The DMAs, the processor system
and the interconnect are vendor blocks and are not part of this RTL.

## The network

```
in1 (10 words) ─► L1: 32 neurons, ReLU ─► L2: 16 neurons, ReLU ─► L3: 3 scores ─┬─► out1 (3 words)
                                                                                └─► argmax ─► typei (1 word)
```

Each neuron computes `y = b + Σ x_i · w_i` and the hidden layers apply
`max(0, y)`. All arithmetic is 32-bit two's-complement integer arithmetic and
wraps like C `int`. Products keep their low 32 bits, and there is no
rescaling between layers. The output layer is linear. Its scores can be
negative, as the published hardware results show (for example
`-88099 95648 79217` → class 1), although the published text lists ReLU for
the output layer as well. The predicted class is the index of the largest
score. On a tie the lowest index wins.

Weights: 10·32 + 32·16 + 16·3 = 880. Biases: 32 + 16 + 3 = 51.

## Files

| file | role |
|------|------|
| `rtl/dsaen_pkg.sv` | layer sizes, word widths, memory-select and phase enums |
| `rtl/dsaen.sv` | top level: control FSM, stream ports, memories, layers |
| `rtl/dense_layer.sv` | one fully connected layer, one neuron per clock |
| `rtl/weight_mem.sv` | row-wide parameter memory (one row = one neuron) |
| `rtl/act_buffer.sv` | register buffer between layers |
| `rtl/argmax.sv` | class decision |
| `rtl/axis_reg_slice.sv` | AXI4-Stream register slice, both directions registered |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_dsaen` runs the whole core |

## How a sample flows through the core

The core runs one sample at a time through five phases (`state_e`):

1. **S_LOAD.** Ten words are taken from `in1`, one per cycle when available, into the
   input buffer. `in1_tlast` is ignored: the core counts words.
2. **S_L1, S_L2, S_L3.** Each layer is a `dense_layer` instance. When started, it issues
   neuron `n = 0 … N−1` on consecutive cycles. For each neuron it reads a whole
   row of its weight memory (all inputs' weights at once) and the matching bias,
   multiplies all inputs in parallel, sums, applies ReLU and writes the result
   into the next buffer. The pipeline is three cycles deep: memory read, products, then sum and
   ReLU. The layer's last result and its `done` pulse come N+3 cycles after `start`.
   The next layer starts one cycle later.
3. **S_OUT.** The three scores go out on `out1` (TLAST on the third) and the class
   on `typei` (one word, TLAST set). Both streams run in parallel. The core
   returns to S_LOAD when both have been taken.

All parallelism is within a layer: a layer has as many multipliers as it has
inputs (10, 32 and 16), so 58 in total. Samples are not overlapped. When the
streams never stall, one sample takes

```
IN_N + (H1_N+4) + (H2_N+4) + (OUT_N+4) + OUT_N = 10 + 36 + 20 + 7 + 3 = 76 cycles
```

(0.76 µs at 100 MHz). This is measured and checked in `tb_dsaen`. The
published high-level-synthesis core reports 329 cycles latency and a
330-cycle interval for the same loop structure (input loop of 10, layer loops
of 32, 16 and 3 with initiation interval 1, output loop of 3). Its per-neuron
pipeline is about 110 cycles deep. This RTL keeps the loop structure and the
one-neuron-per-cycle rate, with a much shorter pipeline.

## Interfaces

The clock is `ap_clk`. Reset is `ap_rst_n`: synchronous, active low. Reset
empties the stream slices, clears the buffers and returns the core to S_LOAD.
It does not clear the weight memories.

AXI4-Stream ports, 32-bit `TDATA`. Each port passes through an
`axis_reg_slice`, so every stream output, `TREADY` included, comes from a flip-flop:

| port   | dir | words per sample | content |
|--------|-----|------------------|---------|
| `in1`  | in  | 10 | input features, signed |
| `out1` | out | 3  | class scores, signed; TLAST on the last |
| `typei`| out | 1  | predicted class 0..2; TLAST set |

There is no start/done/idle register interface: the core is driven by its
streams alone, like an HLS block with `ap_ctrl_none`. The host arms the two
receive channels and then sends the sample.

**Weight loading.** The trained weight values of the published network are not
available. So the six parameter memories (W1, B1, W2, B2, W3, B3) are
RAMs written one word per cycle through a simple port, not constant ROMs:

| signal | meaning |
|--------|---------|
| `cfg_we` | write this cycle |
| `cfg_sel` | 0 W1, 1 B1, 2 W2, 3 B2, 4 W3, 5 B3 (`mem_sel_e`) |
| `cfg_row` | neuron index within the layer |
| `cfg_lane` | input index (weight) or 0 (bias) |
| `cfg_data` | 32-bit signed value |

Writes outside a memory's range are dropped. Load the memories while the
core waits in S_LOAD (`state_o == 0`). Loading 931 words takes 931 cycles.
To build the core with fixed weights, replace `weight_mem` by a ROM of the
same row layout. Row `r` of a weight memory holds neuron `r`'s weights, lane
`i` being input `i`.

## Where this RTL follows the published design and where it does not

Follows it:
- the 10‑32‑16‑3 shape;
- ReLU on the hidden layers;
- the three streams `in1`/`out1`/`typei` with their word counts;
- the registered ("register both") stream interfaces;
- the free-running control;
- one neuron per cycle in every layer;
- the class as argmax of the scores.

Own choices, not given by the source:
- 32-bit integer weights and arithmetic, with no rescaling between layers;
- run-time weight loading;
- the three-stage layer pipeline and the resulting 76-cycle interval;
- TLAST generation on the output streams (a DMA receive channel needs it to
  close a transfer);
- lowest-index tie breaking;
- synchronous active-low reset.

Not reproduced:
- the trained weights, so the published per-sample classes and the 89.57 %
  accuracy over the 36 363-sample dataset cannot be checked here;
- the 329-cycle latency;
- the FPGA resource figures.

## Verification

Every module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M` and has a watchdog. With plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/dsaen_pkg.sv rtl/*.sv \
          tb/tb_dsaen.sv --top-module tb_dsaen -Mdir obj && obj/Vtb_dsaen
```

(For a leaf module list only `rtl/dsaen_pkg.sv`, the module and its testbench.)

- `tb_axis_reg_slice`: full-rate streaming with one cycle of latency, then 3000
  cycles of random valid/ready against a scoreboard. An assertion checks that a
  stalled word is held.
- `tb_weight_mem`: fills the memory and reads rows back. Checks the read latency,
  read-during-write behaviour and dropped out-of-range writes.
- `tb_act_buffer`: reset value, addressed writes, dropped writes.
- `tb_argmax`: the three score vectors of the published runs, ties, extremes and random values.
- `tb_dense_layer`: a ReLU and a linear layer side by side against an integer model.
  Checks order, values, wrap-around and the N+3 cycle `done`.
- `tb_dsaen`: the whole core at its full size with random weights. It sends 238 samples,
  including the three published input vectors, and compares every score and class with
  an integer model of the network. It checks the 76-cycle interval. It also
  counts and requires: input gaps, input back-pressure, stalls on both output streams,
  ReLU clipping, negative scores, all three classes, weight reloads and a tie.
- `tb_dataset_run`: streams as many samples as the published test dataset has
  (36 363), with the outputs always ready. It checks every result and the total
  cycle count.

## Changing it

- Layer sizes are the `P_*` parameters of `dsaen`, defaulting to the package
  constants. The `cfg_row`/`cfg_lane` ports are 6 bits wide, which allows up to 64 neurons per layer.
- `DATA_W` and `W_W` in `dsaen_pkg` set the word widths. Narrower
  weights need no other change. Narrower activations change the wrap-around
  points, so the testbench models would have to follow.
- For more throughput, the phases could be overlapped across samples by
  double-buffering the activation buffers. The layers already accept a new neuron every cycle.
