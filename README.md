# Piecewise-linear spiking neurons on a shared, pipelined datapath

The Izhikevich neuron model reproduces most firing patterns of cortical
neurons with two coupled equations,

    v' = 0.04 v^2 + 5 v + 140 - u + I
    u' = a (b v - u)                      if v >= 30 mV:  v := c,  u := u + d

but the `v^2` term needs a multiplier per neuron update. In hardware that
multiplier sets both the clock rate and, on an FPGA, the number of neurons
(one per embedded multiplier). This design replaces the parabola by two,
three or four straight lines (the 2PWL, 3PWL and 4PWL models). Every
remaining constant factor is a sum of powers of two, so one neuron update
needs only adders, absolute-value units and wiring.

Around that neuron this RTL builds a small trainable spiking network. It
has M binary input neurons (the pixels of a 20 x 16 character) and N output
neurons. A supervised rule adjusts the M x N weights until the output
neuron assigned to the presented character fires fast and all others fire
slowly. Only one neuron datapath exists. The N output neurons are
*virtual*: their state circulates through pipelines and buffers, and each is
updated once every N clocks.

Default configuration: M = 320 inputs, N = 30 neurons, 4PWL model, 20-bit
fixed point with 8 integer and 12 fractional bits (8.12), Euler step
dt = 2^-14.

## The neuron models

With `x = v + 62.5`, the parabola is replaced by

| model | nonlinearity f(v) | constants as built |
|---|---|---|
| PWL2 | k1·\|x\| − k2 | k1 = 1/2+1/4, k2 = 20 |
| PWL3 | k1·(\|x+k2\| + \|x−k2\|) − k3·k2·k1 | k1 = 1/2+1/8, k2 = 5.8, k3 = 6.4 |
| PWL4 | k2·(\|x+k3\| + \|x−k3\|) + k1·\|x\| − 4·k2·k3 | k1 = 1/4+1/8, k2 = 1/2+1/4, k3 = 11 |

These are the tonic-spiking coefficients. For PWL4 the same coefficients
serve every neuron type, which is one reason it is the default. The
discrete update is

    v[n+1] = v[n] + (f(v[n]) - u[n] + I[n]) >>> 14
    u[n+1] = u[n] + (a * (b*v[n] - u[n])) >>> 14
    a = 1/8 + 1/16 + 1/64 = 0.203125,   b = 1/4 + 1/16 = 0.3125

Each product with a constant is a sum of arithmetic right shifts. The shifts
round toward minus infinity, and the testbench reference model copies that
rounding bit for bit. Values that are not exact in 8.12 (5.8 and 23.2) are
rounded to the nearest code. The PWL3 and PWL4 datapaths work on 24 bits
internally, because the two absolute values together can exceed the 8.12
range. The new v and u are saturated back to 20 bits.

The V pipeline is 5, 6 or 7 stages deep (PWL2, PWL3, PWL4). The U pipeline
has four arithmetic stages and is padded with delay stages to the same
depth.

Reset values: c = −65 mV and d = 6 are the usual tonic-spiking values. The
threshold is 30 mV. Every neuron starts at v = c and u = b·c.

With a = 0.203125 and b = 0.3125, the PWL4 neuron has no resting state: it
fires tonically even with I = 0. Its rate rises with I. At dt = 2^-4 the
period runs from about 270 updates at I = −2 to 50 updates at I = 20; below
about I = −3 the neuron is silent. The bias current adds 2.0 to every
neuron's input.

## How N neurons share one datapath

This is the part that needs care when changing the design. Four circular
structures turn in step, one slot per clock:

* **weights bank**: M buffers of N weights (one buffer per input).
* **V and U rings**: the V pipeline (V_S stages) plus a V buffer of
  N − V_S words, and the U pipeline plus a U buffer of the same sizes. Each
  ring is exactly N long.
* **counter buffer**: N spike-interval counters.
* **control registers**: the N-bit target register and the N-bit one-hot
  output-select register, both rotating by one position per clock.

In clock t the array output (VO) shows neuron `s = t mod N`. Counting clocks
from the first one with reset low, all of the following hold in that same
clock:

1. The control unit compares VO with 30 mV and raises **Firing**.
2. The V buffer stores `Firing ? c : VO`. The U buffer stores
   `u_new + (Firing ? d : 0)`.
3. The counter buffer presents neuron s's counter. It is cleared on a spike
   and incremented otherwise.
4. The learning mechanism turns the old counter value and the target bit tN
   into ±W_change.
5. The weights bank releases neuron s's M weights. It adds +W_change to each
   weight whose input bit is 1 and −W_change to each whose bit is 0, and
   writes the results back.
6. The updated weights enter the input computation unit. Its
   I_S + D_S clocks of latency plus the V pipeline's V_S clocks bring the
   resulting current to neuron s's next update exactly N clocks later.

This requires

    I_S + D_S + V_S = N,    I_S = 1 + ceil(log2 M) + 1

The I_S stages are the sign stage, the adder-tree levels and the bias
stage. The top computes D_S from this equation. With M = 320 and PWL4:
I_S = 11, V_S = 7, D_S = 12. N must be at least I_S + V_S. Otherwise
elaboration stops with an error.

In this order, a spike's weight change is visible in the current of the
same neuron's next update. The reference model in `tb/snn_ref_pkg.sv` uses
exactly this order: current, Euler step, spike test and reset, counter,
weight change, next current.

**Reset** must be held for at least N clocks. The buffers mark every slot
unwritten, and an unwritten slot reads as its start value. The pipelines
have no reset. Holding reset for N clocks flushes them with values computed
from the start state and zero weights. So every neuron's first update
appears at VO in clocks 0 to N−1 after reset.

**Addressing neurons.** There is no neuron-index counter. `target` and
`neuron_select` are loaded while `valid` is 1. Then the registers rotate
right by one position per clock. Bit j of `target`, and `neuron_select = j`,
therefore refer to the neuron at VO j clocks after the last clock with
`valid` = 1, and every N clocks after that. Always raise `valid` at the same
phase modulo N, or the mapping shifts. Raise `valid` for one clock only, or
with `train_en` low: while `valid` is held, tN is target bit 0 for every
neuron. The input pattern register is loaded by the same `valid`.

## Learning rule

Each neuron's counter measures its spike period in neuron updates. At a
spike, the error against the target period t is `Counter − t`. The period
falls as the current rises, so gradient descent on `(Counter − t)^2` gives

    dW_ij = alpha * I_i * (Counter_j - t_j),     I_i = +1 (pixel 1) or -1 (pixel 0)

The hardware computes `(C_out − period) >>> ALPHA` only when the neuron
fires. It applies the sign of I_i in the weights bank as +W_change or
−W_change.

The target register bit tN chooses the period:

* tN = 1: LOW_PERIOD, 205 updates, which is 80 Hz at 16384 updates per
  second.
* tN = 0: HIGH_PERIOD, 1638 updates, which is 10 Hz.

`train_en` = 0 freezes the weights for recognition. The input current is

    I_j = sum_i (C_i ? W_ij : -W_ij) + i_bias

saturated to 20 bits.

## Blocks and files

| file | block |
|---|---|
| `rtl/pwl_pkg.sv` | number format, model enum, stage counts, constants, saturation |
| `rtl/shift_buffer.sv` | circulating buffer, latency = depth; a memory with a wrapping pointer and per-slot start value |
| `rtl/weights_bank.sv` | M × N weights, ±W_change update, write-back |
| `rtl/input_computation.sv` | bipolar sign stage, pipelined adder tree, bias, D_S delay |
| `rtl/v_pipeline.sv` | membrane update for PWL2/PWL3/PWL4 |
| `rtl/u_pipeline.sv` | recovery update, padded to V_S |
| `rtl/n_unit.sv` | neuron array: both pipelines, V/U buffers, spike reset rule |
| `rtl/counter_buffer.sv` | spike-interval counters |
| `rtl/learning_mechanism.sv` | rotating target register, period select, weight change |
| `rtl/control_unit.sv` | 30 mV comparator, neuron-select encoder and rotating one-hot, c/d, learning |
| `rtl/output_provider.sv` | register for the selected neuron's potential |
| `rtl/pwl_snn_top.sv` | the complete network |

Top-level ports: `clk`, `rst`, `valid`, `input_pattern[M]`, `target[N]`,
`neuron_select[ceil(log2 N)]`, `train_en`. Outputs:

* `v_out`: the selected neuron, refreshed once every N clocks.
* `vo` and `spike`: the neuron at the array output in the current clock.

All values are 8.12 two's complement. To convert to mV, divide by 4096.

Main parameters: `M`, `N`, `MODEL` (PWL2/PWL3/PWL4), `DT_SHIFT`, `WB`
(weight width), `CB` (counter width), `ALPHA`, `HIGH_PERIOD`, `LOW_PERIOD`,
`I_BIAS`, `VTH`, `C_RESET`, `D_INC`.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/pwl_pkg.sv tb/snn_ref_pkg.sv tb/tb_pwl_snn_top.sv --top-module tb_pwl_snn_top
    ./obj_dir/Vtb_pwl_snn_top

Replace the testbench name to run another one. Each block testbench checks
its block against values computed independently in the testbench, including
latencies:

* 5/6/7 clocks for the V pipeline.
* I_S + D_S clocks for the input computation.
* N clocks round trip for the buffers.

`tb/snn_ref_pkg.sv` holds the reference network. It has no notion of
pipelines or clocks, only neuron updates.

* `tb_pwl_snn_top` runs 8 inputs and 16 neurons at dt = 2^-4. It has three
  phases: training with two neurons targeted fast, frozen weights with a
  different pattern, and the trained pattern again. VO, the spike flag and
  v_out are compared with the reference in every clock. It counts spikes,
  positive and negative weight changes, output updates, spikes with
  training off and pattern reloads. Each must occur. After training, the
  targeted neurons must fire with a shorter period (about 118 against 178
  updates).
* `tb_recognition` runs the recognition flow at a reduced size: four 4 x 4
  pixel letter shapes, 16 inputs, 16 neurons. Each shape is trained in
  turn onto its own neuron for six epochs. Then the weights are frozen and
  each shape is shown again. Its neuron must fire more often than any
  other neuron. Every clock is also checked against the reference.
* `tb_pwl_snn_top_full` runs the default configuration (320 inputs, 30
  neurons, dt = 2^-14). It trains until every neuron has fired twice, about
  2.4 million clocks, checking every clock against the reference. It takes
  about a minute.

## Where this RTL departs from, or goes beyond, the published description

* **Only the supervised rule is built.** Unsupervised training is mentioned
  but not specified. The spike-timing synapse dynamics and AER spike
  interfaces are mentioned as possible extensions and are not built.
* **Not built:** the original quadratic Izhikevich pipeline and its
  multiplier variants (combinational, fully pipelined, Booth). They are only
  comparison baselines.
* **Pipeline shift amounts.** The published pipeline drawings print shift
  amounts (such as >>3, <<1, >>7, >>13) that could not be reconciled with
  dt = 2^-14 and the stated a, b. The RTL follows the equations and constants
  given in the text. The drawings are used only for the kind and order of
  operators. Also, how the operations are spread over the 5/6/7 stages is
  this design's own arrangement; only the stage counts come from the
  description.
* **PWL2 sign.** The model equation reads k1|v+62.5| − k2, while the
  discrete-equation table reads k1|v−62.5| + k2. The RTL follows the model
  equation, whose minimum lies at −62.5 mV like the parabola's.
* **Neuron count.** N = 30 is the implemented neuron count, enough for the
  26 output neurons of the A–Z task. The drawing of the select encoder
  assumes N = 2^k. Here the one-hot register is N bits wide with
  k = ceil(log2 N).
* **Own choices for unstated values:**
  * i_bias = 2.0
  * ALPHA = 4
  * weight width 20 bits, counter width 16 bits
  * target periods 1638/205 (derived from 10/80 Hz at dt = 1/16384 s)
  * c = −65, d = 6, start state v = c, u = b·c
  * zero initial weights
  * saturation of weights, currents, u + d and counters
  * the `train_en` input
  * the slot-addressing convention
  * the long reset instead of pipeline resets
* **Tonic-spiking values by default.** c, d and the threshold are top-level
  parameters (`C_RESET`, `D_INC`, `VTH`) that default to the tonic-spiking
  values. a and b are fixed in the U pipeline. Other neuron types need
  other values, which are not given.
* **Spike height.** VO is the raw new potential. At a spike it can
  overshoot 30 mV. It is not clipped to 30 mV before the reset to c.
* **Buffer implementation.** The buffers are memories with a wrapping
  pointer rather than shifting register chains. Their port behaviour is
  identical.

## What fits

The A–Z recognition task needs 320 inputs and 26 output neurons, and the
default build holds both. Its weight memory is 320 × 30 × 20 bits.

The 2000-neuron randomly coupled network used to study network dynamics
does not fit. It has neuron-to-neuron synapses and noisy input, which this
feed-forward array does not have.
