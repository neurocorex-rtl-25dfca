# NeuroCoreX in SystemVerilog: a 100-neuron spiking network emulator with on-chip STDP

This design runs a spiking neural network of up to 100 leaky integrate-and-fire
(LIF) neurons on an FPGA, in real time: one emulated time step per millisecond.
It also learns on chip, with a spike-timing-dependent plasticity (STDP) rule.
The network is described by two signed 8-bit weight matrices, both held in
block RAM:

- `W_AA` (100 × 100) connects every neuron to every other neuron.
- `W_in` (100 inputs × 100 neurons) connects external inputs to the neurons.

The whole network is served by one physical neuron circuit. It visits the
neurons one after another, and every piece of network state lives in memory.
A host PC loads weights and parameters over a 1 Mbit/s UART and streams input
spikes. It receives back the spike vector of every step and the membrane
potential of one selected neuron.

The RTL here is a re-implementation from the published description of
NeuroCoreX. The original was written in VHDL for an Artix-7 board. The
description leaves many details open: how the work inside a step is
scheduled, the host byte protocol, the output format, and several edge cases
of the learning rule. For those, this design makes its own choices, and each
one is called out below, mainly in the sections "The anatomy of one time step"
and "Where this design departs from, or adds to, the description".

## The anatomy of one time step

A single engine (`ncx_engine`) holds all the network logic, and one
`step_tick` starts one time step. At the default rates the tick arrives every
100,000 clocks of 100 MHz, which is 1 ms: the 100 kHz neuron rate divided
over 100 neurons. Inside the step, the engine runs these phases back to back
at 100 MHz:

| Phase | What happens | Clocks |
|---|---|---|
| INPUT | For each input spike due now: read row `a` of `W_in`. Add each weight to its target neuron's accumulator for this step. Apply the presynaptic STDP update to each entry. | ≈ N + 2 per spike |
| NEURON k = 0..N-1 | Pop neuron k's state `{V, I, refractory count}` from the state FIFO. Read its four parameters and apply the LIF update with its accumulator. Push the new state back. | 2 per neuron |
| … ROW (if k fired) | Read row k of `W_AA`. Add each weight to the target's accumulator for the **next** step. Apply the presynaptic STDP update, except on the diagonal. | N + 1 |
| … COL (if k fired) | Read column k of `W_AA` (except the diagonal) and column k of `W_in`. Apply the postsynaptic STDP update. | max(N, N_IN) + 1 |
| AGE | Sweep every entry of both matrices and advance the active traces by one. Traces that reach their window expire. | N·max(N, N_IN) + 1 |
| END | Increment the step counter, swap the accumulator banks, and hand the spike vector and the monitored V to the output. | 1 |

The worst case at N = 100 is every neuron firing: 100 × ~205 + 10,000 ≈
31,000 clocks, well inside the 100,000-clock budget. If a tick comes while a
step is still running, the engine flags `step_overrun` and starts the next
step as soon as the running one ends. It remembers only one pending tick, so
a second missed tick is lost.

Two consequences of this schedule need to be understood to predict the
network's behaviour:

- **Recurrent spikes act one step later.** A spike of neuron k in step t
  enters the accumulators of step t+1. This holds whatever k's position in the
  sweep; two accumulator banks swap at END. Input spikes act in the step they
  are due.
- **The neuron rate is an enable, not a clock.** The description has a
  100 kHz clock domain, updating one neuron per 10 µs. Here the 100 updates run
  in a burst at the start of the 1 ms slot and the engine then idles. The
  emulated time base is the same, and the design has a single clock domain.

Every memory sweep is pipelined at one entry per clock. Addresses are issued
in cycle c, the block RAM returns the entry in c+1, and the STDP logic computes
the new entry combinationally so it is written back in the same cycle c+1.
Reads and write-backs overlap, so a sweep of L entries takes L+1 clocks.

## Neuron arithmetic

All neuron quantities use an 18-bit signed fixed-point format with 7 integer
bits and 10 fractional bits (Q7.10). This covers V, I, V_th, the leak,
V_reset and λ_syn; 1.0 is 1024. Per neuron and step, `lif_neuron` computes
(combinationally):

```
inj  = sat(acc << w_shift)              acc = sum of 8-bit weights of this step's spikes
I'   = sat(decay(I, λ_syn) + inj)       decay: move I towards 0 by λ_syn, never past 0
Vc   = sat(V - leak + I')
if refractory count > 0:  V' = V_reset, count - 1          (no spike)
elif Vc > V_th:           V' = V_reset, count = t_ref, spike
else:                     V' = Vc
```

The description gives the two update equations V(t+1) = V(t) − λ + I_syn and
I_syn(t+1) = I_syn(t) − λ_syn. It also calls the synapse "exponential". This
design follows the equations, so the current decays linearly toward zero.

The weight-to-current scaling is left open ("resizing and bit-shifting"). Here
it is a register, `w_shift`, with default 10, so a weight of 1 adds 1.0 to I.
Values saturate at the Q7.10 limits; V has no floor other than that.

During a refractory step the input is still integrated into I, while V stays
at V_reset.

The four neuron parameters (threshold, leak, refractory period, reset) sit in
four small RAMs. `t_ref` is 8 bits, counted in steps.

## Synapse memories and the learning rule

Each matrix is a `synapse_bank`: five parallel block RAMs that share one
address, `row·COLS + col` (row-major). Each entry holds:

| Field | Width | Meaning |
|---|---|---|
| `w` | 8 (signed) | weight |
| `en` | 1 | enable_STDP mask bit, static, written by the host |
| `pre` | 8 | steps since the presynaptic spike; `FF` = disabled |
| `upd` | 1 | update_state: the pre trace is armed for potentiation |
| `post` | 8 | steps since the postsynaptic spike; `FF` = disabled |

The pair-based rule has a rectangular window. With Δt the number of steps
between the two spikes:

- **Potentiation.** If the target neuron fires while `upd = 1` and
  0 < `pre` < `t_pre`, the weight gains `dw_pos`. Then `pre` goes to `FF` and
  `upd` to 0.
- **Depression.** If the source neuron (or input) fires while
  0 < `post` < `t_post`, the weight loses `dw_neg`. Then `post` goes to `FF`.

A source spike always restarts the entry's trace (`pre = 0`, `upd = 1`). A
target spike always restarts `post = 0`.

At the end of every step the AGE sweep adds 1 to every active trace. A pre
trace that reaches `t_pre` expires (`FF`, `upd = 0`). A post trace that
reaches `t_post` expires too.

Pairs within the same step (Δt = 0) change nothing. Weights saturate at
−128..127. A weight changes only when learning is enabled for its matrix
(`stdp_en` bits) and its own `en` bit is set.

The defaults dw_pos = dw_neg = 1, t_pre = 15 and t_post = 30 are the values
shown in the original learning-rule figure.

The description shows only the presynaptic trace matrix. Keeping a second,
postsynaptic trace matrix per synapse is this design's choice. It costs one
more 8-bit RAM per matrix.

`W_in` learns the same way. Its "source" is the input spike, and its target is
the neuron its column belongs to.

STDP is skipped on the diagonal of `W_AA`, a neuron's synapse onto itself. The
diagonal weight still carries spikes.

## Input spikes: word, FIFO, scheduler

The host sends each input spike as a 24-bit word: a 16-bit input address and
an 8-bit time difference to the previous spike, in steps. The words queue in
the input FIFO (1024 deep). `spike_scheduler` keeps the due step of the
previous spike, `base`, and computes the head word's due step as
`base + dt`. When the step counter reaches that step, the word is handed to
the engine, which takes it in its INPUT phase; `base` then becomes that step.

To send several spikes for one step, give all but the first a difference of 0.

A spike whose step has already passed is injected at once, and the
`late_spike` flag is set. An address ≥ N_IN is ignored and sets `link_error`.
A full FIFO drops words and sets `in_fifo_overflow`.

## Host link protocol

The link is 8N1 at 1 Mbit/s: `CLKS_PER_BIT = 100` at 100 MHz. This byte
protocol is this design's own; the description gives only the spike word.
Multi-byte fields are sent MSB first.

| Frame | Bytes | Meaning |
|---|---|---|
| write | `A0 tgt rowH rowL colH colL d2 d1 d0` | write one item |
| read | `D0 tgt rowH rowL colH colL` | read one item, answered by `D1 d2 d1 d0` |
| spike | `B0 addrH addrL dt` | one input spike word |
| control | `C0 flags` | bit 0: run (1) / stop (0); bit 1: clear |

The `tgt` byte selects what is accessed:

| `tgt` | Target | row, col | data |
|---|---|---|---|
| 0 | `W_AA` weight | source neuron, target neuron | signed 8-bit in `d0` |
| 1 | `W_AA` enable_STDP | source, target | bit 0 |
| 2 | `W_in` weight | input, neuron | signed 8-bit |
| 3 | `W_in` enable_STDP | input, neuron | bit 0 |
| 4 | neuron parameter | neuron, 0 V_th / 1 leak / 2 t_ref / 3 V_reset | Q7.10, or steps for t_ref |
| 5 | global register | col = index | see below |

The global registers are:

| Index | Register | Default |
|---|---|---|
| 0 | λ_syn (Q7.10) | 0 |
| 1 | dw_pos | 1 |
| 2 | dw_neg | 1 |
| 3 | t_pre | 15 |
| 4 | t_post | 30 |
| 5 | learning enable (bit 0 `W_AA`, bit 1 `W_in`) | 0 |
| 6 | w_shift | 10 |
| 7 | monitored neuron | 0 |

Global registers can be changed at any time and take effect at once, even in
the middle of a running step.

Matrix and parameter accesses wait until the engine is between steps. At
1 Mbit/s a frame takes 60 to 90 µs, so this is never noticeable. A byte that
arrives while a request is still waiting is dropped and flagged, so the host
should not stream frames back to back faster than steps end.

After reset, an initialisation sweep of about N·max(N, N_IN) clocks zeroes
every memory: weights 0, masks 0, traces disabled, neuron states 0. A clear
(`C0 02`) resets only the traces, the neuron states, the step counter and the
input FIFO. The loaded network is kept.

## What comes back

At the end of every step the output packer writes this packet into a 512-byte
FIFO that feeds the transmitter:

```
E0  t[7:0]  s[7:0] s[15:8] ... (ceil(N/8) bytes, bit i = neuron i)  v2 v1 v0
```

`v` is the monitored neuron's V after the update, sign-extended to 24 bits.
For N = 100 a packet is 18 bytes, which takes 180 µs at 1 Mbit/s, so the link
keeps up with 1 ms steps. If the FIFO is full, a step's packet is dropped
whole and `record_lost` is set, and the host sees a gap in `t`.

## Modules

| File | Role |
|---|---|
| `rtl/ncx_pkg.sv` | number formats, synapse entry, neuron state/parameter structs, host request, command codes |
| `rtl/neurocorex_top.sv` | top level: link → decoder → config / input FIFO → scheduler → engine → packer → output FIFO → link; sticky status flags |
| `rtl/ncx_engine.sv` | step sequencer, memories, state FIFO, accumulators, host access to matrices and parameters |
| `rtl/lif_neuron.sv` | the one neuron update circuit (combinational) |
| `rtl/stdp_rule.sv` | the learning rule and trace ageing for one synapse entry (combinational) |
| `rtl/synapse_bank.sv` | one matrix: five parallel RAMs, row-major |
| `rtl/sdp_ram.sv` | simple dual-port block RAM, registered read |
| `rtl/sync_fifo.sv` | FIFO (input spikes, neuron states, output bytes) |
| `rtl/spike_scheduler.sv` | releases buffered input spikes at their step |
| `rtl/timebase.sv` | 100 kHz neuron tick and 1 ms step tick from the 100 MHz clock |
| `rtl/host_decoder.sv` | host frames → requests, spike words, run/clear |
| `rtl/config_regs.sv` | global learning and neuron-wide registers |
| `rtl/output_packer.sv` | step packets and read replies as bytes |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | 8N1 serial link |

Top-level parameters and their defaults:

| Parameter | Default |
|---|---|
| `N` | 100 |
| `N_IN` | 100 |
| `CLKS_PER_BIT` | 100 |
| `NEURON_CLK_DIV` | 1000 |
| `IN_FIFO_DEPTH` | 1024 |
| `OUT_FIFO_DEPTH` | 512 |

At the defaults the design holds about 560 kbit of RAM. Each matrix needs
10,000 × 26 bits.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself;
each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ncx_pkg.sv tb/tb_neurocorex_top.sv \
          --top-module tb_neurocorex_top -Mdir obj_top
./obj_top/Vtb_neurocorex_top
```

Replace the name to run any other testbench (`tb/tb_<module>.sv`).

- `tb_neurocorex_full` runs the top with every parameter at its default. It
  configures a 100-neuron network over the link at 1 Mbit/s and runs 12 steps
  of 1 ms. It checks every packet against a reference model, and that the
  steps start exactly 100,000 clocks apart. It takes about 10 s.
- `tb_neurocorex_top` is the end-to-end test at reduced sizes: 6 neurons,
  4 inputs, a 180-clock step and small FIFOs. It makes every mechanism happen
  and counts each one:
  - input injection, spikes, recurrent propagation, refractory holds
  - potentiation and depression on both matrices, trace expiry
  - step overrun, input FIFO overflow, a late spike, a lost step record
  - read-back, clear
- `tb_ncx_engine` drives a random 5-neuron, 3-input network with learning on
  random masks. It compares the spikes, V, every final weight and the learning
  event counts with the model.
- `tb_workload_digits` runs a DIGITS-style classifier at full size: 64 inputs
  and 10 output neurons, learning off, 32 steps per sample with rate-coded
  pixels. The weights come from random class templates, because trained
  weights are not part of this design. It checks every packet and the
  predicted class against the model.
- `tb_workload_graph` runs a MicroSeer-sized spiking graph at full size:
  84 paper neurons and 6 topic neurons in `W_AA`, with learning on the
  paper-topic synapses. The graph is random. A test paper's spike spreads
  through the citations while STDP adjusts the weights. It checks every packet
  and the learning event counts against the model.
- `tb/ncx_host_link.svh` holds the host side shared by the two workload
  testbenches: the serial frames, the packet decoding and the model stepping.
- `tb/ncx_ref_model.svh` is the reference model that the engine, top,
  full-size and workload testbenches share. It is
  written with plain integers and clamping, independently of the RTL types.

## Where this design departs from, or adds to, the description

- One clock (100 MHz). The 100 kHz neuron rate is an enable, and the neuron
  updates of a step run as a burst at its start. The original uses an MMCM
  with two clock domains; the MMCM is not part of this RTL.
- Recurrent spikes act in the next step. The order of the phases inside a step
  is this design's own.
- Trace ageing is a full sweep of both matrices at the end of each step. With
  N = 100 this is the largest single cost (10,000 clocks). It is also what
  would limit scaling (see below).
- There is a separate postsynaptic trace matrix, no STDP on the `W_AA`
  diagonal, no weight change for same-step pairs, and saturating weights.
- The synaptic current decays linearly (the description's equation), not
  exponentially.
- The host protocol, output packet, register map, status flags, clear and
  read-back are all this design's own. The Python host software is not
  reproduced. The testbenches act as host.
- FIFO depths, the 16-bit input accumulator and the 8-bit refractory counter
  are sizes the description does not give.

## Capacity against the published workloads

| Workload | Fits at the defaults? | Why |
|---|---|---|
| DIGITS classification | yes | 64 inputs and 10 outputs of 100/100. Up to 128 input spikes over 32 steps, 40 µs per spike on the link. |
| MicroSeer graph network | yes | 90 neurons in `W_AA`. Even with all of them firing, a step takes about 28,500 of its 100,000 clocks. |
| Fig. 3 raster / membrane trace | yes | Every step's spikes and one selected potential are streamed. |
| 1000 neurons at 1 MHz neuron rate | no | The parameters allow N = 1000, but the ageing sweep alone would take 10 ms per step. |
| ~500-neuron bound of the original | no | At N = 500 the ageing sweep (250,000 clocks) makes steps 2.5 ms. |

If larger networks are needed, the first change would be to age traces lazily,
for example by storing spike times instead of counters, so that a step touches
only the rows and columns of neurons that fired.
