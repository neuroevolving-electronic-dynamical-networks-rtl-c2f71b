# A lock-step CTRNN evaluation engine for neuroevolution

Neuroevolution of continuous-time recurrent neural networks (CTRNNs) spends
almost all of its time on fitness evaluation. Every individual of every
generation is a small dynamical system that has to be integrated for
hundreds or thousands of time steps. Selection, mutation and recombination
cost little by comparison. The engine here moves that integration into
hardware. It holds a whole batch of individuals at once, one network per
processing element (PE), and advances all of them by forward-Euler steps in
lock-step. A host processor loads the parameters of a batch over an AXI4-Lite
port, starts the run, polls for completion and reads back the final neuron
states. The evolutionary algorithm and the fitness function stay in software
on the host.

The design follows the architecture of *Neuroevolving Electronic Dynamical
Networks* (D. Whitley), a CTRNN evaluator on a Zynq UltraScale+ device (ZCU102
board). That description fixes the main points:

- the CTRNN equations;
- forward-Euler integration;
- a 256-entry, 16-bit sigmoid look-up table;
- parallel PEs with parameters in block memory;
- a start/terminate handshake with completion polling;
- parameter transfer over AXI;
- a total of 628 neurons on the device.

It gives no microarchitecture, number formats, register map or timing. All
of those are choices made in this RTL. They are called out below, so the
reader can tell which parts come from the description and which are this
implementation's own.

## 1. The model and its discrete form

Each network has N neurons with state `y_i`, time constant `tau_i`, bias
`theta_i`, external input `I_i` and weights `w_ij` (from neuron j to neuron i):

    tau_i dy_i/dt = -y_i + sum_j w_ij * sigma(y_j + theta_j) + I_i
    sigma(x)      = 1 / (1 + exp(-x))

One forward-Euler step with step size `dt` is

    y_i <- y_i + h_i * ( -y_i + sum_j w_ij * sigma(y_j + theta_j) + I_i ),   h_i = dt / tau_i

All `sigma_j` of one step are computed from the states of the previous step,
so all neurons of a network update together.

**Departure:** the host writes `h_i = dt/tau_i`, not `tau_i`. The engine then
needs a multiplier but no divider. The host knows `dt` and `tau_i` and
computes `h_i` once per individual.

### Number formats (this implementation's choice)

| quantity            | format          | width | range / resolution          |
|---------------------|-----------------|-------|-----------------------------|
| state `y`, input `I`| signed Q16.16   | 32    | ±32768, 1.5e-5              |
| weight `w`, bias `theta` | signed Q8.8 | 16  | ±128, 1/256                 |
| step factor `h`     | unsigned Q0.16  | 16    | 0 .. 0.99998                |
| `sigma`             | unsigned Q0.16  | 16    | 65535 means ~1.0            |
| accumulator         | signed Q24.24   | 48    | N products w*sigma          |

The arithmetic of one neuron update, exactly as the RTL does it (`>>>` is an
arithmetic shift, i.e. rounding towards minus infinity):

    x_j    = y_j + (theta_j << 8)                      # Q16.16
    acc_i  = sum_j w_ij * sigma_j                      # Q8.8 * Q0.16 = Q8.24
    drive  = (acc_i >>> 8) + I_i - y_i                 # Q16.16
    y_i   <= sat32( y_i + ((drive * h_i) >>> 16) )

The state saturates at the 32-bit limits instead of wrapping. The
testbenches' reference model (`tb/ctrnn_ref_pkg.sv`) repeats this arithmetic
independently of the RTL, so the comparison is bit-exact.

## 2. The sigmoid table

The description calls for a table of 256 sixteen-bit entries, with no range
or spacing. Here the table covers `x` in [-8, 8) in bins of 1/16. Inputs
beyond that clamp to the first or last entry. The sigmoid there is already
within 0.0003 of 0 or 1.

    k        = clamp( floor(16 * x) + 128, 0, 255 )
    table[k] = round( 65535 * sigma( (k - 128 + 0.5) / 16 ) )

Each entry is the sigmoid at the centre of its bin. The table is computed by
a constant function at elaboration (`sigmoid_lut.sv`), so it needs no data
file and synthesizes to a ROM. The read is registered, like a block ROM.

Every neuron has its own table, so all neurons of all PEs look up their
activation in the same cycle. At the default size that makes 628 tables of
4 kbit, about 2.6 Mbit of ROM, most of the engine's memory. Two neurons could
share one dual-port block ROM to halve this; that is not done here.

## 3. Processing element and the step schedule

A PE (`ctrnn_pe.sv`) is one complete N-neuron network, that is, one
individual. Its N neurons (`ctrnn_neuron.sv`) work in parallel. The
weight-matrix product is computed one column per cycle: in column j the PE
broadcasts `sigma_j` to every neuron, and each neuron multiplies it by its
own `w_ij`. Each neuron keeps its incoming weight row in a small block memory
(N words), and its state, bias, step factor and input in registers.

One Euler step is the same command sequence in every PE, issued by the
controller:

| cycle        | command       | what every neuron does                                              |
|--------------|---------------|---------------------------------------------------------------------|
| 0            | `PH_ACT`      | look up `sigma(y_i+theta_i)` (valid next cycle), clear acc, read `w_i0` |
| 1 .. N       | `PH_MAC`, col = j | `acc += w_ij * sigma_j` (sigma_j broadcast), read `w_i(j+1)`    |
| N + 1        | `PH_UPD`      | Euler update of `y_i`                                               |

So **one step takes N + 2 cycles**, and an evaluation of S steps takes
`S*(N+2)` cycles. This does not depend on the number of PEs, because all of
them run at once. At the default N = 2, 1000 Euler steps take 4000 cycles.

The neuron-parallel, synapse-serial arrangement is the simplest one that
includes the three parts the description names (state update, activation
and weight-matrix product). It needs one multiplier per neuron. A fully
parallel N x N product would cut a step to 3 cycles at N times the
multipliers.

## 4. Evaluation control: start, halt, done

`eval_ctrl.sv` turns a start pulse into `STEPS` Euler steps. It broadcasts the
`{phase, col}` command to all PEs and counts busy cycles and completed steps.
`busy` is high for the whole evaluation. `done` pulses for one cycle after
the last update. The host interface turns that pulse into a sticky DONE bit,
which it keeps until the next start; that bit also drives the `done_irq` pin.

- A start while busy is ignored.
- A start with `STEPS = 0` reports done at once.
- A **halt** (abort) ends the evaluation after the update of the step in
  progress. The states left behind therefore always hold a whole number of
  steps, and `STEPCNT` says how many.
- The states stay in place after an evaluation. A second start continues
  integrating from them, unless the host writes new states. A host that
  wants a trajectory rather than an end point can run several short
  evaluations and read the states between them.

The description asks for handshake signals that start and terminate the
evaluation, and for completion polling. The halt at a step boundary and the
two counters are this implementation's own.

## 5. Host interface and address map

`axil_host_if.sv` is an AXI4-Lite slave with 32-bit data. It handles one
transfer at a time. A write needs AW and W valid together and is answered
on B in the next cycle. A control-register read answers in the next cycle.
A neuron-space read takes three cycles.

Control registers (bit `ADDR_W-1` = 0):

| byte addr | name    | access | contents                                             |
|-----------|---------|--------|------------------------------------------------------|
| 0x00      | CTRL    | W      | bit 0 start, bit 1 halt (write-one pulses)           |
| 0x04      | STATUS  | R      | bit 0 busy, bit 1 done (sticky until next start)     |
| 0x08      | STEPS   | RW     | Euler steps per evaluation                           |
| 0x0C      | CYCLES  | R      | busy cycles of the current or last evaluation        |
| 0x10      | STEPCNT | R      | Euler steps completed                                |
| 0x14      | INFO    | R      | [31:16] number of PEs, [15:0] neurons per PE         |

Neuron space (bit `ADDR_W-1` = 1). The word address is `{pe, neuron, slot}`:

| slot | field     | format                        |
|------|-----------|-------------------------------|
| 0    | `y_i`     | Q16.16                        |
| 1    | `theta_i` | Q8.8 in bits 15:0             |
| 2    | `h_i`     | Q0.16 in bits 15:0            |
| 3    | `I_i`     | Q16.16                        |
| 4+j  | `w_ij`    | Q8.8 in bits 15:0             |

The field widths are `SLOT_W = clog2(4+N)`, `NRN_W = clog2(N)` and
`PE_W = clog2(NUM_PE)`, so `ADDR_W = 3 + PE_W + NRN_W + SLOT_W`. At the
default size this is 3 + 9 + 1 + 3 = 16 bits, and

    byte address = 0x8000 | pe << 6 | neuron << 5 | slot << 2

There are two refusal rules, both answered with SLVERR and without effect:

- a write whose strobe is not `4'hF`;
- a neuron-space write while an evaluation runs.

Weights are read through the same memory port that the PEs use, so weight
read-back is valid only while the engine is idle. State reads are valid at
any time.

A batch loads `NUM_PE * N * (4+N)` words: 3768 at the default size. The
description moves parameters with DMA engines over AXI. The DMA and the
processor are platform parts and are not in this RTL. The top exposes the
AXI4-Lite slave that they would drive.

The interface asserts the slave-side AXI rules: B and R stay valid and
stable until accepted, and only one transfer is in flight. The controller
asserts that the column index stays below N and that done never coincides
with busy.

## 6. Size

The top `ctrnn_accel` has two parameters:

- `N` (default 2): neurons per network.
- `NUM_PE` (default 314): networks evaluated at once.

The description reports 628 neurons on its device. It evaluates a
two-neuron coupled oscillator, in which each neuron drives the other. Here
that is read as 314 networks of 2 neurons. This split is an interpretation:
the description gives only the total.

In synthesis (generic, before mapping to a device) the default top is about
31k word-level cells, 111k flip-flop bits and 2.6 Mbit of memory. The memory
is mostly the per-neuron sigmoid tables.

Populations larger than `NUM_PE` run in batches. The host reloads
parameters between batches. The evaluations in the description use periods
of 100 to 1000 Euler steps and 10^2 to 10^6 circuits per population. At the
defaults:

| population | batches of 314 | compute cycles at 1000 steps |
|------------|----------------|------------------------------|
| 100        | 1              | 4,000                        |
| 1,000      | 4              | 16,000                       |
| 10,000     | 32             | 128,000                      |
| 100,000    | 319            | 1,276,000                    |
| 1,000,000  | 3185           | 12,740,000                   |

Each batch also costs the AXI transfers that load it: 3768 parameter words
in, 628 states out.

## 7. Departures and open points

The following come from the description:

- the CTRNN equations and forward-Euler integration;
- the 256 x 16-bit sigmoid table;
- parallel PEs, each with state update, activation and weight product;
- parameters in block memory;
- AXI transfer of states, biases, weights and time constants;
- read-back of states after an evaluation;
- start/terminate handshake with polling;
- 628 neurons in total.

These are this implementation's choices:

- all number formats, and saturation of the state;
- the sigmoid table's range, spacing and rounding;
- storing `dt/tau` instead of `tau`;
- the split of 628 neurons into 314 two-neuron networks;
- the one-column-per-cycle schedule and its N + 2 cycles per step;
- AXI4-Lite rather than a burst or streaming AXI, and the register map;
- halt at a step boundary, and the SLVERR rules;
- the external input `I_i` held constant during an evaluation (the
  description does not say where time-varying inputs would come from).

Not built:

- The host processor and the DMA engines: platform parts, whose interface is
  the AXI4-Lite port.
- Dynamic partial reconfiguration, which the description credits for loading
  new generations. It is a device-specific configuration mechanism; here a
  new generation is loaded by rewriting the parameters over the bus.
- The fitness function, which runs on the host and whose formula is not
  given.

## 8. Files

| file                      | contents                                                        |
|---------------------------|-----------------------------------------------------------------|
| `rtl/ctrnn_pkg.sv`        | formats, sequencer command type `seq_t`, slot numbers           |
| `rtl/sigmoid_lut.sv`      | 256 x 16 sigmoid ROM                                             |
| `rtl/ctrnn_neuron.sv`     | one neuron: parameters, weight row, MAC, Euler update            |
| `rtl/ctrnn_pe.sv`         | one network of N neurons with the sigma broadcast                |
| `rtl/eval_ctrl.sv`        | step sequencer, start/halt/done, counters                        |
| `rtl/axil_host_if.sv`     | AXI4-Lite slave, control registers, neuron-space bus             |
| `rtl/ctrnn_accel.sv`      | top: NUM_PE PEs, controller, host interface, read-back mux       |
| `tb/ctrnn_ref_pkg.sv`     | bit-exact reference model (sigmoid in real arithmetic)           |
| `tb/axil_bfm.svh`         | AXI4-Lite master tasks                                           |
| `tb/ctrnn_accel_tb_body.svh` | end-to-end test shared by the two top-level testbenches       |
| `tb/tb_*.sv`              | one self-checking testbench per module, plus the full-size one   |

## 9. Verification and simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog.

- `tb_sigmoid_lut`: about 400 inputs against the formula in real
  arithmetic, clamping on both sides, one-cycle latency, enable.
- `tb_ctrnn_neuron` (N = 3): random parameters, read-back of every field,
  two Euler steps per parameter set with chosen broadcast sigmas, and
  saturation.
- `tb_ctrnn_pe` (N = 3): whole-network steps against the reference, and
  N + 2 cycles per step.
- `tb_eval_ctrl` (N = 3): the exact command sequence cycle by cycle,
  `steps*(N+2)` busy cycles, the done pulse, start while busy, halt in mid
  step and in the first cycle, and zero steps.
- `tb_axil_host_if`: the register map, the start and halt pulses, sticky
  done, SLVERR with no side effect, and random neuron-space traffic.
- `tb_ctrnn_accel` (5 PEs x 3 neurons) and `tb_ctrnn_accel_full` (the default
  314 x 2, no parameter overrides) run end to end over AXI.
  - PE 0 holds the two-neuron oscillator `w = [4.5 1; -1 4.5]`,
    `theta = (-2.75, -1.75)`, `dt/tau = 0.05`. Every other PE holds a random
    mutant of it.
  - The full-size test sweeps evaluation periods of 100, 200, ... 1000 steps
    with a fresh population each time. It then continues ten evaluations of
    100 steps, checks that the oscillator's first neuron crosses its centre
    at 2.75 both ways, and ends with a halt and a zero-step start.
  - After every evaluation all 628 states must match the reference
    bit-exactly, and `CYCLES` must equal `steps*(N+2)`.
  - The test counts each mechanism and fails if any never occurred: start,
    done seen by polling, `done_irq`, halt, SLVERR while busy, start ignored
    while busy, sigmoid clamping, state saturation, zero steps, and
    continuation.
  - The full-size run takes about 20 s to build and 7 s to simulate.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_ctrnn_accel_full rtl/ctrnn_pkg.sv tb/tb_ctrnn_accel_full.sv
    ./obj_dir/Vtb_ctrnn_accel_full

Replace the top module and file name to run any other testbench. The design
is two-state clean: every register that is read is reset or written by the
host before use. The weight memories are not reset, like block RAM.

To change the size, set `N` and `NUM_PE` on `ctrnn_accel`. The address width
follows automatically. Sizes with N of at least 2 are the tested ones.
`INFO` reports the built size to software.
