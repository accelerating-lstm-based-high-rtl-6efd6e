# A fully parallel LSTM accelerator for microsecond structural-state estimation

A structure under impact or blast loading can see accelerations above 100 g
for less than 100 ms, and its state changes within microseconds. A controller that reacts to it needs an estimate of the
structure's state from a model that keeps up with the sensors. Here that
model is a small recurrent network: a three-layer LSTM with 15 hidden units
per layer. It takes a 16-sample window of the measured acceleration and
predicts the structure's state, for example the position of a moving roller
on a test beam. The network is tiny: 5640 weights and biases, stored as 5760 words once
the upper layers' inputs are padded to the first layer's length. All of it
fits on one FPGA. The accelerator trades area for latency:

* Every weight sits in its own block-RAM row next to the multiplier that uses it.
* Every multiply of a gate's dot product runs in the same cycle.
* All 15 hidden units of a layer are computed together.

At the default parameters one time step of the network (three layers, 60
gate dot products of 31 terms each per layer, and the cell/hidden-state
updates) takes **65 clock cycles** inside the accelerator. At 250 MHz that is 260 ns.

The RTL in `rtl/` describes this accelerator and the small system around it:

* input, weight and output BRAMs;
* an AXI4-Lite control slave;
* a start/stop latency timer.

A processor (not included) drives the system over the AXI4-Lite bus.

## The arithmetic of one LSTM layer

Each layer keeps a hidden state `h` and a cell state `c`, 15 words each. Call
its input vector `x`: 16 sensor features for layer 1, the hidden state of the
layer below for layers 2 and 3. For every hidden unit `j` the layer forms
four gate values from the concatenated vector `v = [x ; h_prev]`:

    f_j = sigmoid(W_f[j]·v + b_f[j])      forget gate
    i_j = sigmoid(W_i[j]·v + b_i[j])      input gate
    g_j = tanh   (W_g[j]·v + b_g[j])      modulation (candidate) gate
    o_j = sigmoid(W_o[j]·v + b_o[j])      output gate
    c_j = f_j * c_prev_j + i_j * g_j
    h_j = o_j * tanh(c_j)

`v` is always 31 words long:

* Layer 1: 16 features, then 15 hidden values.
* Layers 2 and 3: the 15 hidden values from below, one zero word, then their own 15 hidden values.

The constant length lets one set of hardware serve all three layers.

### Number format and rounding

By default all values are 16-bit two's-complement fixed point with 12
fraction bits (Q4.12, range −8 … +7.99976, step 1/4096). Parameters `DW` and
`FRAC` set the format; 8- and 32-bit words are supported as well. Results are rounded the same way throughout. A full-precision sum of
products is shifted right arithmetically by `FRAC`, which rounds towards −∞,
and is then saturated to `DW` bits:

    pre  = sat( floor( (Σ_k w_k·v_k + b·2^FRAC) / 2^FRAC ) )
    c    = sat( floor( (f·c_prev + i·g) / 2^FRAC ) )
    h    = sat( floor( (o·tanh(c)) / 2^FRAC ) )

The reference model in `tb/lstm_ref_pkg.sv` reproduces these formulas
independently of the RTL. Results are compared bit for bit.

### Activation functions

The sigmoid is the four-segment piecewise-linear "PLAN" approximation
(`rtl/sigmoid_af.sv`). It needs only shifts, adds and compares:

| `|x|`            | sigmoid(|x|)        |
|------------------|---------------------|
| ≥ 5              | 1                   |
| 2.375 … 5        | |x|/32 + 0.84375    |
| 1 … 2.375        | |x|/8 + 0.625       |
| 0 … 1            | |x|/4 + 0.5         |

For negative inputs, sigmoid(−x) = 1 − sigmoid(x).

`tanh` is computed as `2·sigmoid(2x) − 1` on the same circuit
(`rtl/tanh_af.sv`), with 2x saturated first.

The errors against the exact functions stay below 0.02 for the sigmoid and
below 0.04 for tanh. The testbenches check both limits over all 65536 input codes.

## Hardware organisation

```
             +--------------------- lstm_accelerator ------------------------+
 input BRAM  |  input buffer X1..X31 ----+---------+---------+---------+      |
 (16 words) -+-> (16 feature regs,       |         |         |         |      |
             |    h of this/lower layer) v         v         v         v      |
             |                      4 x P hidden_unit modules (gate f,i,g,o)  |
 weight BRAM |                      each: weight BRAM -> W1..W31 buffer ->    |
 (5760 words)+-> load_weights -->   31 multipliers -> adder -> +bias -> AF    |
             |                           |         |         |         |      |
             |                           v         v         v         v      |
             |                      P evo_unit (c = f*c + i*g, h = o*tanh c)  |
             |                           |                                    |
             |                      state_registers (h, c per layer,          |
             |                      updated registers, commit per layer)      |
             |                           |                                    |
 output BRAM <-- top layer h (15 words) -+                                    |
             +----------------------------------------------------------------+
```

### Hidden-unit module (`rtl/hidden_unit.sv`)

This is the core of the design. One module computes one gate of one hidden
unit. It holds:

* a private weight BRAM, one row per hidden unit it serves. A row has 32
  words: the 31 weights and the bias.
* a weight buffer register (`W1..W31` plus the bias), loaded from the BRAM in
  one cycle, so all weights can be read at once.
* 31 multipliers working in parallel, a product register, an adder tree,
  the bias adder, and the gate's activation function. A parameter picks
  sigmoid or tanh.

Pipeline (5 cycles from `rd_en` to `y_valid`):

| edge | action                                   |
|------|------------------------------------------|
| 1    | weight BRAM row read                     |
| 2    | row copied into the weight buffer        |
| 3    | 31 products registered                   |
| 4    | products summed, bias added              |
| 5    | activation applied, `y` registered       |

A new row can enter every cycle.

### Unit parallelism `P`

The accelerator instantiates `P` hidden-unit modules per gate, so `4·P` in
all, plus `P` element-wise units.

* With `P = 15` (the default) each module owns one hidden unit, and a layer is one pass.
* With smaller `P`, module `m` serves units `m, m+P, m+2P, …` in
  `PASSES = ceil(15/P)` successive passes, issued one per cycle. Its weight
  BRAM then holds `3·PASSES` rows.

The whole design works for any `P` from 1 to 15. The tests run `P` = 2, 3, 4, 8 and 15.

At `P = 15` the datapath has 4·15·31 = 1860 multipliers for the gates, plus
3·15 in the element-wise units. On an FPGA these map to DSP slices.

### Element-wise unit (`rtl/evo_unit.sv`)

This unit turns the four gate values of a hidden unit into its new `c` and
`h` in two pipeline stages:

1. `c` is formed; `o` is delayed to match.
2. `tanh(c)` is taken and `h = o·tanh(c)` is formed.

### State registers and the input buffer

`rtl/state_registers.sv` holds `h` and `c` for each of the three layers. A
separate set of "updated" registers collects the new values of the layer in
progress. These are copied into the layer's state in one **commit** cycle
after the last unit of the layer is done. Until then every pass still reads
the old `h_prev`, as the recurrence requires.

`rtl/input_buffer.sv` holds the 16 features. It forms `X1..X31` for a layer in one cycle.

### Sequencer and timing (`rtl/lstm_accelerator.sv`)

Commands are single-cycle pulses, accepted while idle:

* `load_weights` copies the external weight BRAM into the per-module BRAMs, one word per cycle. This takes 5761 cycles.
* `start` runs one time step.
* `clear_state` zeroes every `h` and `c`.

State persists between `start`s. Consecutive starts therefore advance one
sequence, and `clear_state` begins a new sequence.

One `start` goes through these phases:

| phase                    | cycles                    |
|--------------------------|---------------------------|
| read 16 features         | N_X + 1 = 17              |
| per layer: load buffer   | 1                         |
| per layer: issue passes  | PASSES (1 at P=15)        |
| per layer: drain 7-stage pipeline | 8                |
| per layer: commit state  | 1                         |
| write 15 outputs         | H = 15                    |

Total: `(N_X + 1) + 3·(PASSES + 10) + H`. That is **65 cycles** at `P = 15` and 86 at `P = 2`.

These cycles run from the edge that samples `start` to the edge that raises `done`.

### External weight layout

The weight BRAM is written by the processor before `load_weights`. Word
`((layer·4 + gate)·15 + unit)·32 + k` holds:

* for `k = 0..30`, the weight for `v[k]`;
* for `k = 31`, the bias.

Gates are ordered f, i, g, o (0…3). For layers 2 and 3, weight `k = 15`
multiplies the zero pad word and has no effect.

## System and register map (`rtl/lstm_system.sv`)

The top level connects:

* the AXI4-Lite controller (`rtl/axil_controller.sv`);
* three simple dual-port BRAMs (`rtl/sdp_bram.sv`), for 16 input, 5760 weight and 15 output words;
* the accelerator;
* a cycle counter (`rtl/axi_timer.sv`).

The counter starts with the accelerator's `start` and stops at its `done`.
The top level's ports are plain AXI4-Lite signals (16-bit address, 32-bit
data, values in the low `DW` bits) and a `done_irq` pulse.

| address           | access | meaning                                              |
|-------------------|--------|------------------------------------------------------|
| 0x0000            | W      | CTRL: bit0 start, bit1 load_weights, bit2 clear_state |
| 0x0004            | R      | STATUS: bit0 busy, bit1 done, bit2 weights loaded    |
| 0x0008            | R      | LATENCY: cycles of the last run, start to done       |
| 0x1000 + 4·i      | W      | input word i (0…15)                                  |
| 0x2000 + 4·i      | R      | output word i (0…14): h of the top layer             |
| 0x8000 + 4·i      | W      | weight word i (0…5759)                               |

Commands written while the accelerator is busy are ignored. LATENCY reads
67 at the defaults: the 65 accelerator cycles, plus one cycle to pass the
command on and one for the timer's start and stop edges.

A typical use:

1. Write the weights, then CTRL = 2, then wait for bit 2 of STATUS.
2. For every time step:
   1. write the 16 inputs;
   2. write CTRL = 1;
   3. poll STATUS until it reads done;
   4. read the 15 outputs.

## Where this design departs from the source publication

The publication presents the accelerator as a block diagram and a per-gate
dataflow figure with measured results. The points below are this design's own choices, or differences from the publication:

* **The number format.** The publication reports 8-, 16- and 32-bit fixed point but not where the binary point sits. Q4.12 was chosen.
* **The activation circuit.** It is not described. The PLAN approximation was chosen.
* **Control details.** Pipeline depths, the sequencer, the weight layout, the register map and the handshakes are all this design's own.
* **Statefulness.** Keeping `h`/`c` across time steps, with an explicit clear, is assumed.
* **The output.** The network's output is the top layer's 15 hidden values. The
  publication does not describe a dense output layer in hardware, and none is built.
* **The fourth gate.** The dataflow figure labels both the first and the fourth
  gate "forget gate". The fourth feeds `o·tanh(c)`, so it is implemented as the output gate.
* **The 31-word input vector.** Layer 1 needs 16 + 15 = 31 words; upper layers need 30.
  Upper layers are padded with one zero word, so the vector length stays constant.
* **Latency.** The publication's fastest result is 1.42 µs at 250 MHz, about 355
  cycles. That figure is measured by a processor timer around the whole
  start/done exchange, on a different implementation. The 65-cycle figure
  here covers the accelerator alone. The two are not directly comparable.
* **Weight loading.** In the publication the BRAMs are filled from external DRAM/HBM.
  Here they are written over AXI4-Lite.

Not included, because they are off-chip or vendor parts:

* the processor (MicroBlaze / ARM);
* the DRAM or HBM and its memory controller;
* the PCIe/JTAG link and UART to the host PC;
* the vendor AXI timer IP, which a simple counter replaces.

With parameters changed, the same RTL runs the publication's other configurations:

* **2-, 3-, 4- and 8-unit parallelism:** these are set with `P` and are tested.
* **32-bit precision:** set `DW = 32`, `FRAC = 28` (Q4.28). Tested with `P = 8`.
* **8-bit precision:** set `DW = 8`, `FRAC = 4` (Q4.4). Tested with `P = 2`.

In both cases the binary point is this design's choice. Four integer bits
are kept, as in the default. Any `FRAC <= DW - 2` is legal, and sums are
carried at full width before saturation.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`:

* **Activations:** exhaustive over all 16-bit inputs.
* **Hidden unit:** random rows, back-to-back issue, 5-cycle latency checked.
* **Element-wise unit, buffers and state registers:** random vectors against
  independently computed values.
* **Accelerator (`lstm_accelerator_tb`):** P = 15 and P = 4 against the
  reference model in `tb/lstm_ref_pkg.sv`. Checks the latency formula and the weight-load time.
* **AXI4-Lite controller:** handshakes, register map, ignored commands.
* **Full system (`lstm_system_tb`):** the default parameters through the AXI4-Lite
  bus. It covers weight load, several consecutive time steps (state carried
  across steps), clear, a command ignored while busy, and the LATENCY register.
  Every output is compared bit for bit with the reference model.
* **Parallelism sweep (`lstm_system_par_tb`):** the same at P = 2, 3, 4 and 8.
* **Precision sweep (`lstm_precision_tb`):** the same with 8-bit words at P = 2
  and 32-bit words at P = 8. The reference network here uses 128-bit integer
  arithmetic, so 32-bit results are exact.

To simulate with Verilator 5, for example the full system:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/lstm_pkg.sv tb/lstm_ref_pkg.sv tb/lstm_system_tb.sv \
        --top-module lstm_system_tb -Mdir obj -o sim
    ./obj/sim

Run it from the directory that holds `rtl/` and `tb/`. The RTL compiles
without warnings. Some testbenches pass narrow values to 64-bit compare
functions, and Verilator reports these as width extensions, hence
`-Wno-fatal`. Replace the testbench
name to run another test. The full-size system test takes about 20 seconds.
Testbenches generate their data with `$urandom`. They read no files.
