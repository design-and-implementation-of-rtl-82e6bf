# Neural-network aided self-interference canceller for full-duplex radios

A full-duplex radio transmits and receives on the same frequency at the same
time. Its own transmitter leaks into its receiver. This self-interference is
far stronger than the wanted signal, and analog cancellation does not remove
all of it. The rest has to be removed digitally. The transmitted baseband
samples `x(n)` are known, so the receiver can rebuild the interference
`y_hat(n)` from them and subtract it from what it received:

    y_c(n) = y(n) - y_hat(n)

The DAC, the IQ mixers, the power amplifier and the ADC all distort the
signal, so `y_hat` cannot be a purely linear function of `x`. This design
splits the job in two:

* **Linear part:** a complex FIR filter over the last `L` transmit samples,
  `y_lin(n) = sum_l h(l) x(n-l)`.
* **Non-linear part:** a small real-valued neural network. Its input is the
  same window, split into real and imaginary parts (`2L` values). It has one
  ReLU hidden layer of `N_h` neurons and two linear output neurons, which give
  Re and Im of `y_nn(n)`. The network is trained on normalised data, so its
  output is scaled back by a power of two, which is a plain shift.

So `y_hat(n) = y_lin(n) + 2^s * y_nn(n)`.

The default configuration is `L = 13`, `N_h = 18`, with a 17-bit datapath.
This network cancels nearly as well as a 7th-order memory polynomial
(-44.4 dB against -44.8 dB on the reference measurements), but about 30 % fewer multiplications. The RTL implements this
canceller in that configuration. It produces one cancelled sample every 9
clock cycles.

```
 x(n)..x(n-12) ──┬──► [window reg] ─► hidden layer (NBN, 52 PEs, ReLU) ─► [reg] ─► output layer (IBI, 4 PEs) ─► denorm ──┐
 (Re, Im, 26     │                                                                                                      ▼
  values)        └──► [window reg + y(n)] ─► linear canceller (complex FIR, 2 complex PEs) ───────────────────────────► (+) ─► y_hat
                                                                                                                        │
                                                                                          y(n) (carried along) ───────► (−) ─► y_c
```

## Files

| file | contents |
|---|---|
| `rtl/sic_pkg.sv` | default sizes, activation and configuration-target enums |
| `rtl/pe.sv` | real multiply-accumulate processing element (PE) |
| `rtl/cpe.sv` | complex MAC PE with three real multipliers |
| `rtl/param_mem.sv` | externally writable weight/bias/coefficient memory |
| `rtl/output_if.sv` | adder tree + bias + activation + saturation |
| `rtl/nbn_layer.sv` | neuron-by-neuron stage (hidden layer) |
| `rtl/ibi_layer.sv` | input-by-input stage (output layer) |
| `rtl/pipe_reg.sv` | pipeline register with valid/stall |
| `rtl/linear_canceller.sv` | complex FIR linear canceller |
| `rtl/denorm.sv` | power-of-two output scaling |
| `rtl/si_combiner.sv` | `y_hat = y_lin + y_nn`, `y_c = y - y_hat` |
| `rtl/nn_si_canceller.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module; `nbn_check.sv` and `ibi_check.sv` are harnesses, `sic_ref_pkg.sv` is the reference arithmetic |

## Number format

All weights, biases, inputs and partial sums are `Q`-bit two's complement
numbers (default `Q = 17`), with `FRAC = 12` fractional bits, so 1.0 is 4096.
Every multiplier forms the full `2Q`-bit product. It then shifts the product
right by `FRAC` (truncating toward minus infinity) and saturates it to `Q`
bits. Every accumulation also saturates to `Q` bits. An adder tree sums at
full width and saturates once, after the bias has been added. Saturation on
overflow comes from the original design. The position of the binary point and
the truncation are this implementation's choices. If you train a network for
this hardware, quantise it to the same format. `FRAC` is a parameter.

## Layers as macro-pipeline stages

Each network layer is one *macro-pipeline stage*. A stage spends several
cycles on one input vector. Its next stage starts as soon as it has valid data.
Every stage has the same parts:

* an input interface, which is a multiplexer per PE;
* `N_PE` PEs;
* a weights memory that is one word of `N_PE` weights wide, so every PE gets
  its weight each cycle;
* a biases memory;
* a control unit, made of counters that drive the memory addresses, the PE
  `init`/`enable` signals and the stall logic;
* a register after the PEs;
* an output interface: adder tree, bias and activation.

A layer computes `o_j = f(b_j + sum_i w_ij x_i)`. The two stage types differ in
how they walk through this double sum.

### The PE

The PE (`pe.sv`) multiplies `din * weight_i`. It adds the product either to 0
(`init_sum_i = 1`, start of a sum) or to the partial sum stored in its memory.
A second multiplexer then selects the new sum (`en_i = 1`) or keeps the old one
(`en_i = 0`, stall). The selected value is the PE output, and it is written
back into the memory at every clock edge. In the hidden layer the memory is a
single register. In the output layer it may hold several partial sums, one per
neuron the PE serves, selected by `addr_i`.

### Hidden layer: neuron by neuron (`nbn_layer`)

The whole input vector of `N_I = 2L = 26` values is available at once. Neurons
are processed in groups:

* **If `N_PE > N_I`:** `N_PE` must equal `k * N_I`. Each cycle finishes `k`
  neurons. PE `p` multiplies input `p mod N_I` for neuron `p / N_I` of the
  group.
* **If `N_PE <= N_I`:** `k = 1`. One neuron takes `ceil(N_I / N_PE)` cycles,
  and the PEs accumulate.

With 52 PEs, `k = 2`, so 18 neurons take 9 cycles.

The pipeline register after the PEs holds the finished partial sums of the
group. In the next cycle the output interface adds the 26 partial sums of each
neuron with a balanced tree, adds the bias, applies ReLU and emits the `k`
neuron values as one *beat*. So the first beat appears `N_I/N_PE + 1 = 2`
cycles after the vector arrives. All beats are out after `N_n N_I / N_PE + 1 = 10`
cycles. A new vector starts every 9 cycles.

### Output layer: input by input (`ibi_layer`)

The output layer needs every hidden neuron to compute even one output. So it
turns the loop around: it takes the hidden values **as they arrive** and adds
each one's contribution `w_ij x_i` to all output neurons at once. Its input is
the hidden layer's beat stream of `k = 2` values per cycle.

With 4 PEs and 2 output neurons, PE `p` updates neuron `p mod 2` with input
lane `p / 2`. So each cycle consumes one beat (2 hidden values) and updates
both outputs. After 9 beats the four PE sums are registered. The output
interface then adds the two lane sums of each neuron and the bias, with no
activation.

If there are fewer PEs than output neurons, each input is applied over
`ceil(N_n / N_PE)` cycles, and every PE keeps several partial sums in its
memory. Only the testbench uses that case.

### Why the two schedules fit together

The hidden layer emits 2 neurons per cycle, and the output layer eats 2 inputs
per cycle. The output layer therefore runs only two cycles behind the hidden
layer, instead of waiting for all 18 hidden neurons. Only `k` values cross
between the layers per cycle, not `N_h`. The top level requires both `k`
values to match.

Cycle by cycle, for a window accepted at the clock edge that ends cycle 0:

| cycles | what happens |
|---|---|
| 1 – 9 | hidden PEs compute neuron groups 0 – 8 (2 neurons each) |
| 2 – 10 | hidden output interface emits beats 0 – 8 |
| 3 – 11 | the register between the layers presents beats 0 – 8; the output layer accumulates them |
| 1 – 7 | the linear canceller multiplies 2 taps per cycle (13 taps); its result waits from cycle 8 |
| 12 | output-layer result; denormalise, add `y_lin`, subtract from `y` |
| 13 | `y_c(n)` and `y_hat(n)` valid at the outputs |

Latency is 13 cycles and the period is 9 cycles. Every stage needs at most 9
cycles: 9 for the hidden layer, 9 for the output layer, 7 for the linear
canceller. The throughput is therefore `min(T_h, T_o) = 1/9` sample per
cycle. This is 10.2 MS/s at 92 MHz and 27.8 MS/s at 250 MHz.

## Pipeline handshake

The stages talk with a `valid`/`stall` pair, whose names follow the original
design: `valid_prev_i`, `stall_o`, `valid_o`, `stall_next_i`. A word moves in
a cycle where `valid` is high and `stall` is low.

* The window register (`pipe_reg`) holds the vector. The hidden layer keeps
  `stall_o` high until its last cycle on that vector. So the register releases
  the vector exactly when the next one can enter, and no second copy of the
  26 inputs is needed inside the layer.
* A stage whose output is valid but stalled freezes completely: no counter,
  PE or register moves.
* The window is duplicated into two registers, one for the network and one
  for the linear canceller, which also carries `y(n)`. A new window enters
  only when both registers can take it.
* `si_combiner` joins the two branches. It takes both inputs in the same
  cycle.

Stalls therefore travel back to `stall_o` at the top, and the pipeline never
drops or reorders samples.

## Linear canceller, denormalisation and combiner

* **`linear_canceller`** splits the 13 taps over two complex PEs (`cpe`), so
  it needs 7 cycles. Each complex product uses three real multipliers:
  `k1 = c(a+b)`, `k2 = a(d-c)`, `k3 = b(c+d)`, giving `Re = k1-k3` and
  `Im = k1+k2`. The two PE sums are added and registered together with `y(n)`.
* **`denorm`** shifts both network outputs by the signed run-time amount
  `denorm_shift_i`. A positive amount shifts left, with saturation. A negative
  amount is an arithmetic right shift. The range is -8 to 7.
* **`si_combiner`** forms `y_hat = sat(y_lin + y_nn)` and `y_c = sat(y - y_hat)`.
  It registers both values.

## Loading a network

All memories are written through one port on the top:

* `cfg_we_i` is the write enable.
* `cfg_sel_i` selects the memory: `CFG_HID_W`, `CFG_HID_B`, `CFG_OUT_W`,
  `CFG_OUT_B` or `CFG_LIN_H`.
* `cfg_addr_i` is the word address.
* `cfg_data_i` carries the data. Value `p` of a word sits in bits
  `[p*Q +: Q]`.

The word layouts at the default size are:

| memory | words | value `p` of word `a` |
|---|---|---|
| hidden weights | 9 × 52 | weight of input `p mod 26` of neuron `2a + p/26` |
| hidden biases | 9 × 2 | bias of neuron `2a + p` |
| output weights | 9 × 4 | weight of hidden neuron `2a + p/2` into output `p mod 2` (0 = Re, 1 = Im) |
| output biases | 1 × 2 | bias of output `p` |
| linear coefficients | 7 × 2 complex | value `2p` = Re, `2p+1` = Im of tap `2a + p` |

Hidden input `i` is `Re x(n-i/2)` for even `i` and `Im x(n-(i-1)/2)` for odd
`i`. That is, the order is Re x(n), Im x(n), Re x(n-1), ...

In the output layer a word therefore holds the weights of `k` hidden inputs
for all `N_n` output neurons. This is one reading of the original
description, which says only that a word holds `N_PE` weights.

The memories are not reset. Load every word before you use the canceller.
This is 550 parameters in total: 468 + 18 hidden, 36 + 2 output and 26 linear.
Write them while the pipeline is idle.

## Size

There are 52 + 4 real multipliers plus 2 × 3 in the complex PEs, 62 in all.
A sample needs 543 real multiplications, and the design has 62 × 9 = 558
multiplier slots per sample. Synthesis of the top gives about 2100 flip-flop
bits and about 10 300 memory bits. Most of the memory is the parameter store:
550 × 17 = 9350 bits.

## What is this design's own choice

The original design fixes the algorithm, the two stage schedules, the PE
structure, the memory word widths, the PE counts and the sizes. The following
points are not specified there and were chosen here:

* the binary point (`FRAC = 12`), truncation of products, and a single
  saturation after each adder tree;
* the handshake details: when a word moves, freeze-on-stall, the window
  register duplicated for the linear branch, and `y(n)` carried through the
  linear branch;
* combinational (LUT-RAM style) reads of the parameter memories; no memory
  reset; synchronous active-high reset elsewhere;
* the word layouts of all memories and the single shared configuration port;
* no activation on the output layer (a ReLU there could not produce negative
  Re/Im values);
* the denormalisation as a run-time signed shift of 4 bits, with no offset;
* the structure of the complex PE and the tap schedule of the linear
  canceller;
* the window `x(n)..x(n-12)` is an input of the top, all values in parallel,
  as the original design assumes. No transmit delay line is included.

Not included: the analog front end, the trained network and its dataset, and
the polynomial canceller that served as the comparison baseline.

## Verification

Each testbench drives its module and checks every output against a
bit-accurate integer model in `tb/sic_ref_pkg.sv`. The models are written
independently of the RTL structure. Each testbench ends with
`TB_RESULT checks=N failures=M`.

* `tb_pe`, `tb_cpe`, `tb_output_if`, `tb_denorm` and `tb_param_mem` use random
  operands, including values that saturate.
* `tb_nbn_layer` and `tb_ibi_layer` each test two configurations: the default
  layer, and one where the PEs must accumulate over several cycles (NBN) or
  hold several partial sums (IBI). They use random input gaps and random
  stalls. They check the latency formulas above with cycle counts.
* `tb_linear_canceller` checks the FIR results and its 7-cycle period.
* `tb_nn_si_canceller` runs the full default-size design on a random transmit
  stream through three phases:
  * random gaps and stalls with a left shift;
  * a parameter reload with a right shift;
  * a continuous stream, where it checks the 13-cycle latency and the 9-cycle
    period.

  It also counts back-pressure, output stalls, layer overlap, ReLU clipping
  and saturation, and fails if any of them never happened.

* `tb_q_sweep` runs the whole canceller at five datapath widths,
  `Q` = 15, 17, 20, 23 and 26, each with `FRAC = Q - 5`. The received signal
  is the double-precision output of the same random network and FIR filter.
  The residual therefore contains only the error of the fixed-point
  arithmetic. Every output is also checked bit for bit. Typical results:

  | `Q` | 15 | 17 | 20 | 23 | 26 |
  |---|---|---|---|---|---|
  | cancellation (dB) | 30 | 47 | 59 | 73 | 94 |

  These figures measure arithmetic precision only. They are not the
  cancellation on a real radio, which is limited by how well the trained
  network models the hardware.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/sic_pkg.sv tb/sic_ref_pkg.sv tb/tb_nn_si_canceller.sv \
    --top-module tb_nn_si_canceller -o sim
./obj_dir/sim
```

Replace the last file and the top-module name to run another testbench. Lint
a module with `verilator --lint-only -Wall -y rtl rtl/sic_pkg.sv rtl/<module>.sv`.

Limits of what has been checked:

* Only random weights were used, not a trained network, so cancellation in dB
  was not measured.
* The PE counts are parameters, but only the layer configurations listed
  above were simulated. The whole design was simulated at five values of `Q`.
