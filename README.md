# ETLP gradient module in SystemVerilog

Event-based Three-factor Local Plasticity (ETLP) is an online learning rule
for spiking neural networks. It needs no backward pass and no error signal.
The weight change of a synapse is the product of three factors, all
available at that synapse:

1. **pre-synaptic trace**: a low-pass filter of the spikes arriving at the
   synapse, `eps(t) = alpha * eps(t-1) + I(t)`;
2. **post-synaptic factor**: a surrogate derivative of the post-synaptic
   neuron's spike function, taken at its membrane voltage. Here it is the
   triangle `max(0, 1 - |v|)`;
3. **third factor**: a teaching value. A class label is turned into spikes
   of "teaching neurons". The teaching value is the fixed (random or signed)
   weight from the active teaching neuron to this neuron. It is zero when no
   teaching spike arrives, so learning happens only while a label is present.

Each neuron keeps one trace per input, not one per synapse, and nothing is
stored across time steps except those traces. That makes the rule cheap
enough to put next to each neuron in neuromorphic hardware.

This repository holds the digital block that computes the rule's gradient
for one neuron, one synapse at a time:

```
gradient = trace(addr) x surrogate(voltage) x teaching
```

Before the product is formed, `trace(addr)` is advanced by one time step
using the spike of input `addr`, and the new value is written back. The
neuron model, the weight memory, the scheduling of synapses and the weight
update `W += lr * gradient` belong to a surrounding "upper module". That
module is not part of this design. Only its interface is defined here (see
*Driving the module*).

The structure follows the published FPGA proof of concept of ETLP: its
block diagram, port names, three-state sequencer, three-cycle update and its
worked numerical example. Number formats, memory size and some arithmetic
details are not given there. They are this design's choices, marked as such
below.

## Block structure

```
             +-------------------------------------------------------+
 voltage --->| etlp_surrogate ---- surr --------------+               |
             |                                        v               |
 spike ----->| etlp_trace <-- trace_old --+    +--------------+       |
             |     |                      |    | etlp_grad_mul|-> gradient register --> gradient
             |     +--- trace_new --------+--->|  (2 mults)   |       |
             |     |                      |    +--------------+       |
 addr ------>|     +--> etlp_trace_mem ---+           ^               |
             |            ^  re/we                    |               |
 teaching -->|------------|---------------------------+               |
 step_i ---->| etlp_ctrl -+--- grad_load ---------------------------->| step_o
             +-------------------------------------------------------+
```

| file | role |
|---|---|
| `rtl/etlp_pkg.sv` | default sizes, state type |
| `rtl/etlp.sv` | top: wires the blocks, holds the gradient register and interface assertions |
| `rtl/etlp_ctrl.sv` | control unit: INIT -> READ -> WRITE -> INIT sequencer |
| `rtl/etlp_trace_mem.sv` | block RAM, one trace per pre-synaptic address |
| `rtl/etlp_trace.sv` | trace update: shift-and-subtract leak plus spike increment |
| `rtl/etlp_surrogate.sv` | triangular surrogate gradient |
| `rtl/etlp_grad_mul.sv` | trace x surrogate, then x teaching |

## Number format

All datapath values are signed two's-complement fixed point: `DATA_W = 16`
bits with `FRAC_W = 8` fraction bits, so 1.0 is `256` and the range is
[-128, 128). This choice is not from the published design, which only prints
decimal values. All of its example values (0.25, 0.75, 1.875, 1.40625,
2.8125) are exact in this format. Both multipliers truncate toward minus
infinity (an arithmetic shift right by `FRAC_W`) and saturate to 16 bits. The
trace adder saturates too.

## Pre-synaptic trace

The leak `alpha` is a power-of-two fraction: `alpha = 1 - 2^-DECAY_SHIFT`.
This costs a shift and a subtract rather than a multiplier:

```
trace_new = trace_old - (trace_old >>> DECAY_SHIFT) + (spike ? INC : 0)
```

The published design shows this structure but does not print the shift or
the increment. `DECAY_SHIFT = 3` (alpha = 0.875) and `INC = 1.0` are the
values that reproduce its example: a trace of 1 becomes 1.875 when a spike
arrives. For another membrane time constant, change `DECAY_SHIFT`. For
example, tau = 80 steps gives alpha of about 0.9876, close to a shift of 6.
The steady-state trace under a spike every step is `INC * 2^DECAY_SHIFT`
(8.0 by default). With the default `INC`, the trace adder's saturation can
therefore never be reached. It only guards larger increments.

## Surrogate

`etlp_surrogate` forms `|v|` with a comparator and a multiplexer over `v` and
`-v`. It subtracts `|v|` from 1.0 and passes the difference only when it is
positive. The learning-rule equation has an extra constant factor in front
of the triangle. The hardware leaves it out, as the published module does
(0.25 in gives 0.75 out); that constant can be folded into the learning rate.

For an adaptive-threshold (ALIF) neuron, the upper module should supply
`v - A`, the voltage relative to the neuron's current threshold. For a LIF
neuron with threshold 1, it should supply `v - 1`. The module takes whatever
it is given as `x` in `max(0, 1 - |x|)`.

## Sequencing and timing

The module performs one update per request, in three clock cycles:

| cycle | state | what happens |
|---|---|---|
| accept | INIT, `step_i` = 1 | memory read of `addr` is issued on this edge |
| 1 | READ | old trace is on the RAM output; new trace, surrogate and product form combinationally; gradient register loads at the end |
| 2 | WRITE | new trace is written back at the end; `gradient` is already valid |
| 3 | INIT, `step_o` = 1 | tells the upper module to apply the gradient; a new `step_i` may be given in this same cycle |

Updates can therefore run back to back at one per three cycles. The RAM
output is not re-read during WRITE, so the new trace stays stable while it is
written. `gradient` holds its value until the next update's READ cycle.

The state names, their order and the three-cycle latency come from the
published design. Where `step_o` falls and when the gradient register loads
are this design's choices, made consistent with the published example.

## Driving the module

- Present `addr`, `spike`, `voltage` and `teaching` with a one-cycle
  `step_i`. Hold all four until `step_o`. Two assertions in `etlp.sv` check
  that the operands do not change and that `step_i` does not arrive while an
  update is in flight.
- Issue one update per incoming synapse in every time step, including steps
  with no teaching spike. Use `teaching = 0` in those steps: the trace must
  still decay and take in spikes, and the gradient is then 0.
- When `step_o` is high, add `lr * gradient` to the weight of synapse
  `addr`.
- For an output neuron, the output-layer form of the rule replaces the
  teaching weight with `(2*s_out - I - 1)/2`, where `s_out` is the output
  neuron's spike. The upper module must compute that factor and pass it as
  `teaching`.
- `rst_n` (asynchronous, active low) resets the sequencer and the gradient
  register. It does not reset the traces. The RAM starts at zero, as an FPGA
  block RAM does after configuration. To clear traces, write a spike-free
  update often enough for them to decay, or reload the device.

## Sizing and throughput

The trace RAM has `2^ADDR_W` entries, 2048 by default. This size is a
choice: 2048 x 16 bits fits one 36 Kb FPGA block RAM, and the published
module used exactly one. One module serves one neuron:

| neuron (network from the ETLP evaluation) | inputs | fits in 2048 | cycles per 100-step sample |
|---|---|---|---|
| SHD recurrent hidden (700 input + 450 recurrent) | 1150 | yes | 345,000 |
| SHD feed-forward hidden | 700 | yes | 210,000 |
| SHD output | 450 | yes | 135,000 |
| N-MNIST hidden | 2064 | **no**, set `ADDR_W = 12` | 619,200 |
| N-MNIST output | 200 | yes | 60,000 |

An SHD sample covers one second (100 steps of 10 ms), so one module per
hidden neuron keeps up with real time at a clock of 345 kHz or more.

## Cost

After generic synthesis the module has 20 flip-flop bits: a 2-bit state,
`step_o` and the 16-bit gradient register. It also has two 16 x 16
multipliers and one 2048 x 16 RAM. The published FPGA build reported
22 flip-flops, 2 DSP blocks, 115 LUTs and one block RAM tile.

## Where this design departs from the published one, and what it omits

- Widths, fixed-point format, rounding, saturation, memory depth, the decay
  shift and the increment are this design's own, as described above.
- The ALIF rule adds an adaptation trace to the eligibility:
  `eps_a(t) = eps(t)*phi(t) + (gamma - phi(t)*theta)*eps_a(t-1)` and
  `e(t) = phi(t)*(eps(t) - theta*eps_a(t))`. The published hardware computes
  only `eps x phi x teaching`, and so does this design. Adding the term would
  need a second stored value per synapse, which the published module does not
  have.
- The upper module is not included: neurons, the weight memory, the teaching
  neurons and the time multiplexing of synapses.
- An event-driven variant that runs only when a teaching spike arrives is
  mentioned as a possible optimisation. It is not built, because the traces
  still have to be advanced every step.

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. Using
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          --top-module tb_etlp rtl/etlp_pkg.sv tb/tb_etlp.sv
obj_dir/Vtb_etlp
```

| testbench | what it checks |
|---|---|
| `tb_etlp_surrogate` | all 65,536 inputs against `max(0, 1-|v|)` |
| `tb_etlp_trace` | every non-negative trace, with and without a spike |
| `tb_etlp_grad_mul` | the published example, saturation, rounding, 40,000 random operands |
| `tb_etlp_trace_mem` | zero start-up contents, random reads and writes, output hold |
| `tb_etlp_ctrl` | strobes and `step_o` cycle by cycle, three cycles per back-to-back update, reset |
| `tb_etlp` | full module at default size against a reference model. It covers the published example (gradient 2.8125), all 2048 addresses and 30,000 random updates. It also checks the three-cycle latency of every update and that each mechanism occurs (spike / no spike, clipped surrogate, negative voltage, negative and zero teaching, gradient saturation, back-to-back issue, idle gaps) |
| `tb_etlp_workloads` | 100 time steps of every synapse of an SHD hidden neuron, an SHD output neuron and an N-MNIST output neuron, with exact cycle counts (345,000 / 135,000 / 60,000) |

All testbenches run at the default parameters and take well under a minute.
