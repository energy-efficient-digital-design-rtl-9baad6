# A configurable digital LIF neuron: clock-driven or event-driven

A leaky integrate-and-fire (LIF) neuron keeps a membrane potential `U` that
leaks towards zero, adds a weight for every input spike, and fires when `U`
exceeds a threshold. In discrete time:

    U[t+1] = beta * U[t] + sum_i W_i * X_i[t] - R[t]

There are two ways to evaluate this in hardware, and this RTL builds both.

* **Clock-driven.** Every time step multiplies `U` by `beta`, whether or not
  anything arrived.
* **Event-driven.** Nothing happens until an input spike arrives. Then the
  neuron catches up on all the leak it skipped: if `dt` steps have passed
  since the last update, it multiplies `U` by `beta^dt` in a single operation.

The design is one neuron with 8 synapses, written so that every variant
compared in "Energy-Efficient Digital Design: A Comparative Study of
Event-Driven and Clock-Driven Spiking Neurons" (Marostica, Carpegna, Savino,
Di Carlo) is the same RTL under different parameters. Three choices are fixed
before synthesis:

| parameter | values | what changes |
|---|---|---|
| `MODE`  | `MODE_CLOCK_SERIAL`, `MODE_EVENT_SERIAL`, `MODE_EVENT_AER` | how inputs arrive and when the leak is applied |
| `DECAY` | `DECAY_MULT`, `DECAY_SHIFT` | the leak uses an exact fixed-point multiplier, or a shifter with a power-of-two approximation |
| `RESET` | `RESET_ZERO`, `RESET_SUB` | after a spike, `U` is set to 0, or the threshold is subtracted from it |

`MODE` x `DECAY` gives the six variants of the comparison. The default is
event-driven AER with the shifter and subtract reset.

## Block structure

    lif_neuron (top entity)
    ├── neuron_cu      control FSM: accepts steps or packets, sequences the datapath
    ├── weights_rom    8 x 6-bit signed weights, read combinationally
    └── neuron_dp      datapath
        ├── membrane_reg   9-bit signed potential
        ├── dt_tracker     steps since the last update (counter or timestamp register)
        ├── exp_decay      U * beta^dt
        │   ├── decay_lut        beta^dt table (coefficients or shift codes)
        │   └── decay_multiplier | decay_shifter   (only the selected one is built)
        ├── sat_adder      U + W, saturating
        └── firing_reset   U > VTH ?  zero / subtract reset

All shared types and constants are in `lif_pkg`: the configuration enums, the
shift-code struct, the datapath control word `dp_ctrl_t`, and the functions
that compute the decay tables.

The datapath is one combinational loop. It runs in the order of the update
equation:

    membrane_reg -> exp_decay -> sat_adder -> firing_reset -> membrane_reg

The control unit enables each stage separately through `dp_ctrl_t`:
`decay_en`, `add_en`, `fire_en`, `load`, plus `dt_idle` and `dt_commit` for
the time tracker. A disabled stage passes its input through unchanged. So in
one clock cycle the datapath can decay only, add only, or decay, add and fire
together.

## Number formats

| quantity | width | format |
|---|---|---|
| membrane potential `U` | 9 | signed, range -256..255 |
| weight `W` | 6 | signed, range -32..31 |
| time step, `dt`, AER timestamp | 7 | unsigned, 128 steps |
| AER address | 3 | channel 0..7 |
| multiplier coefficient | 9 | unsigned, 8 fraction bits (256 = 1.0) |

Any sum that would leave the 9-bit range saturates at -256 or 255.

## The leak: beta^dt from a table

In the event-driven neuron, `dt` can take any value from 0 to 127. Raising
`beta` to a variable power at run time is costly, so `decay_lut` holds one
precomputed entry per `dt`. The entries are computed at elaboration time by
constant functions in `lif_pkg`, so the table needs no data file. Entry 0
means "no decay". It is used when several AER packets belong to the same
time step.

**Multiplier variant.** Entry `dt` is `round(beta^dt * 256)`, with
`beta = BETA_Q / 256`. The default is `BETA_Q = 240`, i.e. `beta = 0.9375`.
`decay_multiplier` computes `(U * coef) >>> 8`, which rounds towards minus
infinity. The product is marked `use_dsp = "no"`, so an FPGA flow builds it
from LUT logic. The study this design follows kept DSP blocks out of every
variant.

**Shifter variant.** `beta` is restricted to `1 - 2^-n` (parameter
`SHIFT_N`, default 4, so `beta = 0.9375`). A single step is then
`U - (U >>> n)`: one shift and one subtraction, no multiplier.

For `dt > 1`, `beta^dt` is no longer of that form. The table therefore
stores a *shift code* `{keep, sub, k}` that picks the closest of these
factors:

* `1 - 2^-k`, applied as `U - (U >>> k)`
* `2^-k`, applied as `U >>> k`

with `k` from 1 to 15. For `beta = 1 - 2^-4` the table comes out as:

| dt | beta^dt | stored factor |
|---|---|---|
| 1 | 0.9375 | 1 - 2^-4 (exact) |
| 2..3 | 0.879..0.824 | 1 - 2^-3 |
| 4..7 | 0.773..0.636 | 1 - 2^-2 |
| 8..15 | 0.597..0.380 | 1/2 |
| 16..25 | 0.356..0.199 | 2^-2 |
| 26..36 | 0.187..0.098 | 2^-3 |
| ... | ... | one more shift about every 11 steps |

This makes the leak coarse over long silences. It matches `beta` exactly for
the single-step case that dominates dense input. For `SHIFT_N = 1`
(`beta = 0.5`) the entries are exact, `2^-dt`, up to `dt = 15`.

In the clock-driven neuron, `dt` is always 1, so only entry 1 is ever read.

## Where dt comes from

`dt_tracker` depends on `MODE`:

* **Event serial.** A saturating counter. Each all-zero step adds 1. An
  update sets it back to 1, which is the distance to the next step. It
  stops at 127.
* **AER.** A register holds the timestamp of the last update, and
  `dt = ts - last_ts` modulo 128. For this to be right, consecutive packets
  must be less than 128 steps apart.
* **Clock-driven.** `dt = 1`, constant.

## Control unit and timing

Nothing is pipelined: one step or one packet is handled completely before
the next is accepted.

**Serial modes** (`MODE_CLOCK_SERIAL`, `MODE_EVENT_SERIAL`). One time step is
an 8-bit vector on `step_spikes`. It is taken when `step_valid && step_ready`.

| step | cycles | clock-driven | event-driven |
|---|---|---|---|
| all bits zero | 1 | decay by beta, threshold check | counter +1, potential untouched |
| any bit set | 1 | decay by beta | decay by beta^dt, counter back to 1 |
|  | 8 | channel i (0..7): add W_i if bit i is set; threshold check in the last cycle | same |

Every channel is scanned, set or not. So the serial latency does not depend
on how many inputs are active in a step. It grows only with the number of
steps that carry any spike. Both serial variants take exactly the same
number of cycles; they differ only in what the datapath computes.

**AER mode.** Every input spike is one packet `(aer_addr, aer_ts)`: the
channel, and the time step it belongs to. It is taken when
`aer_valid && aer_ready`. A packet takes 2 cycles:

1. The packet is latched.
2. Decay by `beta^(ts - last_ts)`, add the weight at `aer_addr`, and check
   the threshold, all in one cycle.

Timestamps must not decrease. The threshold is checked after every packet,
because the stream carries no end-of-step marker. This is the one place
where AER behaves differently from the serial variants. A step whose weights
cross the threshold and then fall back is reported as a spike in AER mode
and not in the serial modes.

**Output.** `out_valid` pulses once per step (serial) or once per packet
(AER), one clock after the cycle that computed it. It comes with
`spike_out` and `out_ts`. `out_ts` is the step index since the last `clr`
(serial) or the packet's timestamp (AER). `u_mem` always shows the
potential. It holds the new value when `out_valid` is high.

**Reset and clear.** `rst` and `clr` are both synchronous and active high.
`clr` zeroes the potential and the time state, so it starts a new input
sample. The input port set that the chosen `MODE` does not use keeps its
ready output low.

The top module has assertions for both handshakes: data that is presented
but not yet accepted must stay unchanged.

### Latency over the sparsity sweep

`tb_lif_sweep` runs all six variants on the same stimulus: 100 time steps,
8 channels, and a range of temporal densities (share of steps with any
spike) and input densities (share of channels active in such a step). At
100 MHz it measures these latencies:

| input density | temporal density | clock-driven / event serial | AER | AER / clock |
|---|---|---|---|---|
| 25 % | 5 % | 1.4 us | 0.2 us | 0.14 |
| 25 % | 100 % | 9.0 us | 4.0 us | 0.44 |
| 50 % | 100 % | 9.0 us | 8.0 us | 0.89 |
| 75 % | 100 % | 9.0 us | 12.0 us | 1.33 |
| 100 % | 100 % | 9.0 us | 16.0 us | 1.78 |

With stimuli that have the spike statistics of the three datasets of the
study (`tb_lif_datasets`, mean over 8 random samples, so the figures move
slightly with the random seed), the latencies are about:

| dataset profile | temporal / input density | clock-driven | AER | AER / clock |
|---|---|---|---|---|
| AudioMNIST | 16.6 % / 74.8 % | 2.33 us | 1.97 us | 0.85 |
| N-MNIST | 93.7 % / 1.6 % | 8.56 us | 1.90 us | 0.22 |
| MNIST | 100 % / 13.2 % | 9.00 us | 2.69 us | 0.30 |

The multiplier and shifter versions of a variant always have the same
latency. The general trend matches the study:

* AER is far faster when input is sparse.
* Its advantage shrinks as input density grows.
* It loses once most channels fire in most steps.

The absolute numbers are this design's own, because the cycle split is this
design's choice.

## Configuration and parameters

All parameters are on `lif_neuron` and are passed down.

| parameter | default | origin |
|---|---|---|
| `N_IN` | 8 | study: 8 input channels |
| `U_BITS` / `W_BITS` / `T_BITS` / `A_BITS` | 9 / 6 / 7 / 3 | study |
| `SHIFT_N` | 4 (`beta = 0.9375`) | study: `beta' = 2^-4` for MNIST and AudioMNIST, `2^-1` for N-MNIST |
| `BETA_Q`, `BETA_FRAC` | 240, 8 | `beta = 0.9375` as in the study; 8 fraction bits is this design's choice |
| `VTH` | 64 | this design |
| `WEIGHTS` | channels 0..7 = 12, -5, 20, 7, -9, 31, 3, 15 | example values; channel `i` is at bits `[6i +: 6]` |
| `MODE`, `DECAY`, `RESET` | AER, shifter, subtract | this design (the study names no main variant) |

The study writes the MNIST/AudioMNIST decay as "0.9325" next to
`beta' = 0.0625`. Since `1 - 0.0625 = 0.9375`, 0.9375 is used here.

## Where this design departs from, or goes beyond, the study

* **Bias.** The study states that biases are 6-bit, but its update equation
  has no bias term. No bias is implemented.
* **Clock-driven leak.** The study says both that the clock-driven neuron
  decays "at every clock cycle" and that it decays once per time step. Here
  it decays once per time step.
* **Things the study does not give, chosen here:**
  * the threshold value and the strict `>` comparison
  * saturation on overflow
  * rounding towards minus infinity
  * the shift-code candidate set
  * the LUT depth (128) and coefficient precision
  * the AER packet format (3-bit address + 7-bit timestamp)
  * the per-packet threshold check in AER mode
  * the valid/ready handshakes
  * the exact cycle counts
* **Configuration is static.** The study's schematic shows "configuration
  bits" driving selectors. Here they are synthesis-time parameters, so only
  the selected decay unit and table are built.
* **Not built.** The mask layer of the study's software model, a
  PyTorch/SnnTorch construct, is not built. Neither is any network: the
  design is the single neuron that the hardware study characterises.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. They compare
against values worked out independently of the RTL. `tb/tb_lif_ref_pkg.sv`
is a reference model of the neuron. It uses real arithmetic for `beta^dt`,
picks the shift code by its own search, and uses integer floor division for
the shifts. Each testbench prints `TB_RESULT checks=N failures=M` and has a
cycle watchdog.

| testbench | what it covers |
|---|---|
| `tb_weights_rom` … `tb_dt_tracker` | each leaf, mostly exhaustively over the input ranges |
| `tb_neuron_dp` | random control words against the model, two datapath variants |
| `tb_neuron_cu` | exact control sequences and cycle counts in all three modes |
| `tb_lif_neuron` | all six variants, both resets, end to end against the model, per-item latency (see below) |
| `tb_lif_full` | default configuration, the full 80-sample sparsity sweep |
| `tb_lif_sweep` | all six variants over the sweep, latency budgets and the AER/clock ratio trend |
| `tb_lif_datasets` | all six variants on stimuli with the spike statistics of AudioMNIST, N-MNIST and MNIST, each with its own beta (0.9375, 0.5, 0.9375) |

`tb_lif_neuron` also uses random back-pressure and pauses. It counts how
often each mechanism occurred and fails if one never did:

* idle and active steps
* spikes with each reset rule
* adder saturation
* packets sharing a time step
* the elapsed-time counter reaching 127
* back-pressure
* clear

Run a testbench with plain Verilator from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/lif_pkg.sv tb/tb_lif_ref_pkg.sv tb/tb_lif_neuron.sv \
        --top-module tb_lif_neuron -o sim
    ./obj_dir/sim

Swap the testbench name to run another. Every RTL file passes
`verilator --lint-only -Wall` with only unused-signal and unused-parameter
notes, and elaborates in Yosys through the slang front end.

### How far to trust it

The behaviour is checked thoroughly against the reference model. The model,
however, encodes this design's reading of the study. Where the study is
silent (see the list above), the tests confirm the chosen behaviour, not the
study's.

Resource use and power have not been measured. The FPGA numbers in the
study belong to the authors' own implementation, not to this one.
