# DMP-SNN: a spiking-neuron core with a slow memory pathway

A plain leaky-integrate-and-fire (LIF) spiking layer forgets its input within
a few time steps, because its membrane potential decays. This core adds a
second, slow state to each layer. It is a small linear state-space memory
`m` of `d` values, shared by all neurons of the layer. Each time step, the
layer's input spikes are compressed into one scalar `x`. The memory then
evolves as a fixed linear system. Each neuron receives a learned projection
of the memory as an extra input current. The spiking neurons keep their
usual fast dynamics, and the memory carries context over hundreds of steps.
The memory costs `d` state values per layer, not per neuron.

The RTL implements one hidden layer of such a network with a non-spiking
readout, as one inference core:

```
x[k]   = ReLU( W_x . s_in[k] + b )                       scalar memory drive
m[k]   = Abar m[k-1] + Bbar x[k]                         d-dimensional memory
u[k]   = beta u[k-1] + W_f s_in[k] + I_m[k]              LIF membrane
s[k]   = u[k] > theta_u   (u reset to 0 on a spike)       hidden spikes
I_m[k] = W_m m[k]                                        memory current
o[k]   = beta_out o[k-1] + W_o s[k]                      output potentials
class  = argmax_c  sum_k o_c[k]
```

Default size: 140 inputs, 128 hidden neurons, d = 10 memory states,
20 classes, 100 time steps per sample, and 4 neurons processed side by side.
This is the configuration used for spoken-digit classification, with
140-channel cochlear spike trains.

## The key trick: breaking the memory dependency

Taken literally, `I_m[k] = W_m m[k]` makes every neuron wait for the memory
update of the same step. The hardware instead expands `m[k]`:

```
I_m[k] = W_m (Abar m[k-1] + Bbar x[k]) = P m[k-1] + v x[k]
P = W_m Abar   (N x d)        v = W_m Bbar   (N x 1)
```

`P` and `v` are computed offline and stored in place of `W_m`. The neuron
engine then needs only `m[k-1]`, which is already final, and `x[k]`, which is
ready before the step starts. So the memory update (`mem_update`) and the
neuron sweep (`neuron_core`) run at the same time. The memory has two
register slots. `m_prev` is read by the neurons during the whole step, and
`m_next` is written by the update. At the end of the step a commit copies
`m_next` into `m_prev`.

## Dilation

With a skip length `d_s > 1` (register `REG_DILATION`), the memory current
is injected only on steps where `k mod d_s = 0`. On the other steps the
neurons evolve without it, and the P/v SRAM is not read at all. The memory
itself is still updated on every step. The step counter for this restarts
with each sample.

## Dataflow of one time step

```
AER events --> aer_rx --(first event per channel)--> x_drive: acc += W_x[j]
                 |  spike vector s_in[k]                 | end of step: x = ReLU(acc+b)
                 v                                       v
          neuron_core  <---- m_prev, x ----  mem_update (Abar/Bbar RF, row MAC)
          (W_f, P/v, u SRAMs, LIF lanes)            writes m_next
                 |
                 v s[k]  (also on spk_valid / spk_vec)
          output_layer (W_o SRAM, leaky o[c], o_sum[c], argmax)
```

1. **Input collection (`aer_rx`, `x_drive`).** Spikes arrive as address
   events, one channel index per beat, on a valid/ready handshake. A beat
   with `aer_eos = 1` closes the step. Each spike sets a bit of the input
   spike register. The first spike of each channel is also passed to
   `x_drive`, which reads `W_x[j]` and adds it to the drive accumulator
   while events are still arriving. So `x[k]` is ready two cycles after the
   end-of-step beat.
2. **Step start.** The sequencer starts `mem_update` and `neuron_core` in
   the same cycle.
3. **Neuron sweep (`neuron_core`).** The `N_HID` neurons are handled in
   groups of `LANES` neurons. Each group is one word of the neuron SRAM.
   For each group:
   - **LOAD.** One read brings the LANES potentials into register slots.
   - **RUN.** Two paths work at once.
     - *Spike path, input-stationary.* A priority encoder walks only the
       nonzero input bits. For each active input `j` it reads the W_f word
       at `j*(N_HID/LANES)+g`, which holds the weights from `j` to the
       LANES neurons of the group. The word is added lane by lane. Silent
       inputs cost no cycles.
     - *Memory paths, output-stationary.* For each lane, one P/v word (the
       whole row `P[i][0..d-1]` plus `v[i]`) feeds two MACs side by side:
       a d-term MAC forms `P[i].m[k-1]` and a one-term MAC forms
       `v[i]*x[k]`.

     Together with the memory update, these make the four computation
     paths that run in parallel: spike integration, two memory
     integrations and the memory update.
   - **FIRE.** The combinational LIF (`lif_lanes`) computes
     `u' = sat(leak(u) + I_syn + I_m)`, the spike `u' > theta_u`, and reset
     to zero. One write puts the group back, and its spikes go into the
     output spike vector.

   Each neuron state is therefore read once and written once per step
   (operator fusion).
4. **Step end.** When both the core and the memory update are done and the
   output layer is free:
   - `m[k]` becomes `m[k-1]`;
   - the input frame is released, so `aer_ready` rises again;
   - the hidden spikes are handed to the output layer and shown for one
     cycle on `spk_valid` / `spk_vec`.

   The spike vector `spk_vec` is the stream a following layer would
   consume.
5. **Readout (`output_layer`).** The readout runs while the next step's
   events are collected.
   - It leaks the N_OUT output potentials.
   - It adds one W_o row for each hidden spike.
   - It adds the potentials into `o_sum`.

   On the last step of a sample it takes the argmax of `o_sum`, which stands
   for the mean output potential, and pulses `result_valid` with
   `result_class`.

### Cycle counts

For a group with `n` active inputs, `neuron_core` takes
`1 + max(n>0 ? n+1 : 0, mem_en ? LANES+2 : 0) + 1 + 1` cycles. The whole
step takes `1 + G * that`, with `G = N_HID/LANES` (32 by default). For
example, at 20 active inputs and memory injection on, one step takes about
`1 + 32*(1+21+1+1) = 769` cycles.

`mem_update` takes `d+2` cycles (12) and is always hidden behind the sweep.

`output_layer` takes the following per step, overlapped with the next
step's input collection:
- `1 + (#hidden spikes + 1) + 1` cycles;
- plus `N_OUT + 1` cycles on the last step.

## Number formats

The publication gives no bit widths. The formats below were chosen for this
RTL and are collected in `dmp_pkg`.

| quantity | format |
|---|---|
| W_f, W_x, P, v, W_o | 8-bit signed integers |
| u, o (potentials) | 16-bit signed, saturating |
| x, m | 16-bit signed, saturating (x is non-negative after ReLU) |
| Abar, Bbar | 16-bit signed Q2.14 |
| beta, beta_out | 8-bit unsigned Q0.8, leak is `u*beta >>> 8` |
| I_m | `(P.m + v*x) >>> 8`, added at full width before saturation |
| o_sum | 32-bit signed |

Abar and Bbar are the discretised state matrices of the memory. In the
training setup, a Legendre-type (Padé delay) state-space system with window
`theta` is discretised with a zero-order hold. Any `d x d` / `d x 1` pair in
Q2.14 can be loaded. The end-to-end testbench computes them in
SystemVerilog, from the continuous matrices
`A[i][j] = (2i+1)/theta * (i<j ? -1 : (-1)^(i-j+1))` and
`B[i] = (2i+1)(-1)^i / theta`, by scaling and squaring.

## Host interface

Writes go in one per cycle, only while no step is running:
`cfg_we`, `cfg_sel`, `cfg_addr[15:0]`, `cfg_lane[7:0]` and
`cfg_wdata[15:0]`.

| cfg_sel | target | cfg_addr | cfg_lane |
|---|---|---|---|
| 0 W_f | spike weights | `j*(N_HID/LANES) + g` | neuron within group |
| 1 W_x | drive weights | input channel j | - |
| 2 P/v | memory readout | neuron i | 0..d-1 = P[i][lane], d = v[i] |
| 3 Abar/Bbar | memory dynamics | row i | 0..d-1 = Abar[i][lane], d = Bbar[i] |
| 4 W_o | output weights | hidden neuron i | class c |
| 5 registers | see below | register index | - |

The registers and their reset values:

| index | register | reset |
|---|---|---|
| 0 | beta (hidden leak, Q0.8) | 230 |
| 1 | theta_u (hidden threshold) | 10 |
| 2 | b (drive bias) | 0 |
| 3 | d_s (dilation, 0 acts as 1) | 1 |
| 4 | T (steps per sample) | 100 |
| 5 | beta_out (output leak) | 230 |

## Input protocol and sample control

- **Beats.** A beat transfers when `aer_valid && aer_ready`. `aer_addr` is
  the channel. A beat with `aer_eos` set ends the step and carries no spike.
  Addresses at or above `M_IN` are dropped. Repeated events on one channel
  within a step count as one spike.
- **Back-pressure.** After the end-of-step beat the frame is held.
  `aer_ready` stays low until the step ends. The step ends when the neuron
  sweep and the memory update are done and the output layer has taken the
  previous spikes. `in_stall` shows that a beat is waiting.
- **Sample boundaries.** After `T` steps the result is reported. The next
  frame then begins a new sample. At its first step the memory state and
  the output sums are cleared, and the stored membrane potentials are
  ignored. So `o_sum` and `result_class` stay readable until then.
- **Forced restart.** `sample_start`, between steps, resets the step count
  and clears the state at once.
- **Status.** `busy` is high while a step is being processed. `step_idx`
  gives the current step.

## Where this RTL departs from the publication, or fills gaps

- **One hidden layer.** The training setups use one or two hidden layers.
  The evaluated hardware holds one. A second layer would be a second core
  fed from `spk_vec`, which is not provided here.
- **Input spike of the current step.** The architecture drawing labels the
  dependency-breaking step with `s[k-1]`. The equations use `s[k]` for both
  the drive `x[k]` and the spike current. The RTL follows the equations:
  `x[k]` and `W_f s[k]` both use the current step's spikes.
- **Dilation.** The text gives `I_m = W_m m[k_d]` on memory steps. It also
  says that between updates the potential evolves without memory
  injection. The RTL follows the second statement: the memory current is
  zero on non-update steps, and `m` is still updated every step.
- **Reset after a spike.** The RTL resets to zero. The publication does not
  state the reset rule for the hardware.
- **Readout.** The RTL uses a leaky, non-spiking output layer, with class =
  argmax of the summed potentials. The publication reads out the mean
  membrane potential of the last layer and does not describe that layer's
  hardware.
- **Parallelism.** The MAC parallelism is not given. The RTL takes one P/v
  row per cycle, d + 1 products in the two memory MACs. The memory update
  takes one Abar/Bbar row per cycle.
- **Chosen by this RTL.** The following are not given in the publication
  and were chosen here:
  - widths and saturation;
  - the memory-mapped host port;
  - the AER beat format and end-of-step marker;
  - sequential group processing, without overlap between groups;
  - sequential argmax.
- **SRAMs.** The SRAMs are behavioural single-port arrays: one access per
  cycle, registered read data, per-lane write enables. The `sram_1rw`
  module is the place to substitute a memory macro.
- **Not modelled.**
  - The event sensor or cochlea front end that produces the AER stream.
  - Networks with two hidden layers. These would need two cores chained
    through `spk_vec`.
  - The 256-neuron configuration with 4x MAC/LIF logic as a built default.
    It is reachable only through parameters (`N_HID = 256, LANES = 16`),
    which `tb_dmp_workloads` exercises.
  - Convolutional layers for event-camera workloads.
  - Power, area and clocking.

## Files

| file | contents |
|---|---|
| `rtl/dmp_pkg.sv` | widths, formats, host-port codes, saturate and leak helpers |
| `rtl/dmp_snn_top.sv` | top: registers, block wiring, step sequencer |
| `rtl/aer_rx.sv` | AER input, input spike register, back-pressure |
| `rtl/x_drive.sv` | W_x SRAM, on-the-fly accumulation, ReLU |
| `rtl/mem_update.sv` | Abar/Bbar register file, row MAC, m[k]/m[k-1] slots |
| `rtl/neuron_core.sv` | group sweep, W_f / P-v / u SRAMs, both integration paths |
| `rtl/lif_lanes.sv` | fused LIF for LANES neurons |
| `rtl/mac_array.sv` | registered N-term signed dot product |
| `rtl/find_next_set.sv` | next-set-bit encoder for sparse spike walks |
| `rtl/sram_1rw.sv` | single-port SRAM model |
| `rtl/output_layer.sv` | output potentials, sums, argmax |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_dmp_workloads.sv`, `tb/dmp_workload_run.sv` | whole-core runs at other workload sizes |

Every testbench compares against an independent integer model written in
the testbench itself. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

`tb_dmp_snn_top` runs the whole core at its default size with no parameter
overrides:
- It loads random weights and the discretised memory matrices.
- It runs a full 100-step sample, then a short sample with dilation 3 and a
  negative bias.
- It checks every step's hidden spikes and the final sums and class.
- It checks that back-pressure, sparse skipping, ReLU clamping, steps
  without memory injection and overlap between readout and input all
  occurred.

`tb_neuron_core` also checks the cycle-count formula above.

`tb_dmp_workloads` uses the same procedure through the parameterised helper
`dmp_workload_run`. It runs three other layer sizes side by side, all
checked step by step:
- **doubled layer:** 256 hidden neurons with 16 lanes;
- **35 classes:** 250 steps;
- **one input channel:** 200 hidden neurons, d = 40, window 300, and
  784 steps.

These runs show that the parameters scale beyond the default.

## Simulating

With Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal -j 0 --top-module tb_dmp_snn_top \
    rtl/dmp_pkg.sv rtl/*.sv tb/tb_dmp_snn_top.sv
./obj_dir/Vtb_dmp_snn_top
```

List `rtl/dmp_pkg.sv` first, so that the package is compiled before the
modules that import it. Swap the top module and testbench to run any of the
others. The full-size end-to-end test finishes in about ten seconds.
