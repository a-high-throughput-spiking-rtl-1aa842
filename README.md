# A spiking neural network processor with synaptic delays

Spiking networks trained with learnable synaptic delays reach high accuracy
on temporal tasks such as keyword spotting. Most small neuromorphic
processors leave delays out, because every synapse would need its own delay
line. This processor adds them at little cost. For every presynaptic neuron
it keeps a short spike history in a **spiking ring buffer**. A synapse with
delay `d` reads the history entry written `d` timesteps ago. A delayed sum
`sum_i w_ij * s_i[t - d_ij]` then costs one bit select per synapse: the
history window is read once per presynaptic neuron and shared by all of its
synapses.

The RTL here is a SystemVerilog description of such a processor. It has four
identical cores chained as a layer pipeline, an AXI4-Lite configuration unit
and an AXI4-Stream data interface. It is built after a published FPGA
prototype, a SoC on a PYNQ-Z2 board running at 125 MHz. Where the
publication gives no detail, this design makes its own choices. They are
listed in [Departures and own choices](#departures-and-own-choices).

## Neuron model

Each neuron is a leaky integrate-and-fire (LIF) neuron with delayed inputs:

```
u_j[t] = lambda * u_j[t-1] + sum_i w_ij * s_i[t - d_ij]  - (reset)
s_j[t] = (u_j[t] > v_th)
```

The fixed-point arithmetic implemented, per timestep and per layer:

| phase        | operation per postsynaptic neuron j                         |
|--------------|-------------------------------------------------------------|
| leak         | `u = (u * lambda) >>> 8`; `lambda` is an unsigned 8-bit fraction of 256 |
| integrate    | for i = 0..n_pre-1: if `s_i[t - d_ij]`, then `u = sat16(u + w_ij)` |
| fire / reset | `spike = u > v_th`; on a spike `u = sat16(u - v_th)`        |

Sizes: `u` is 16-bit signed, `w` 8-bit signed, `d` 4 bits (0..15 timesteps),
and `v_th` 16-bit signed. Reset is by subtraction and happens in the fire
phase. The next timestep therefore leaks the value after the reset.

## The spiking ring buffer

The buffer (`srb`) is a 256 x 16-bit array with one row per presynaptic
neuron and one column per slot. All rows share one 4-bit head pointer.

* At the start of a timestep the head moves **down** by one (mod 16). The
  input spike vector of the new timestep is then written into column `head`
  of every row in one cycle.
* The spike of neuron `i` from `d` timesteps ago is then in column
  `(head + d) mod 16`. This is the *spike pointer*, delay plus head.
* `d = 0` reads the spike of the current timestep. `d = 15` reads the oldest
  entry, the one about to be overwritten. Sixteen slots therefore serve
  delays 0..15.

During integration the controller reads row `i` once, at `j = 0`. The 16-bit
window stays in the read register while the `n_grp` weight words of that
neuron stream by. Each SCE channel (below) picks its bit with its own delay,
so four synapses with four different delays are served in one cycle.

Example: after pushes at t = 0, 1, 2 the head is 15, 14, 13. At t = 2 a
synapse with `d = 2` reads column 13 + 2 = 15, which the t = 0 push wrote.

## One core

```
            in spikes (256)                     out spikes (256)
                 |                                    ^
             +---v--------------- SDMA ---------------+---+
   weights ->|  input buffer   WTM address gen   output vector |
             +---+-----------------+------------------^---+
                 | push            | write            | 4 spikes / cycle
             +---v---+   +---------v-------+    +-----+------+
             |  SRB  |   |      WTM        |    |  4 x SCE   |<-- MPM read
             |256x16 |   | 16384 x 48 bit  |--->|  channels  |--> MPM write
             +---+---+   +-----------------+    +------------+
                 | window (16)                        ^
                 +------------------------------------+
                           local controller (schedule, addresses)
```

Memories and their addressing:

| memory | words x bits | address | word contents |
|---|---|---|---|
| SRB | 256 x 16 | presynaptic `i` | spike history of neuron `i` |
| WTM | 16384 x 48 | `i*64 + j` | channels `4j..4j+3`: lane k in bits `[12k+11:12k]`, weight low 8, delay high 4 |
| MPM | 64 x 64 | group `j` | potentials of neurons `4j..4j+3`, lane k in bits `[16k+15:16k]` |

### SCE channels

An SCE channel (`sce`) is a configurable datapath: a multiplier, the
truncation of the spike-times-weight product to 16 bits, a shift, a
saturating adder/subtractor, a comparator and the delay unit (the bit select
above). A 2-bit mode picks the phase. The result and the spike are
registered, one cycle of latency. The four channels share the SRB window,
the head, `lambda` and `v_th`. Each channel takes its own weight, delay and
potential lane.

### Schedule and pipeline

The local controller (`local_ctrl`) runs one timestep as
`PUSH -> LEAK -> INTEG -> FIRE -> DRAIN -> DONE`. Integration is in axonal
order: presynaptic `i` is the outer loop and postsynaptic group `j` the
inner loop. One element (four synapses or four neurons) enters a
three-stage pipeline each cycle:

| cycle | stage A | stage B | stage C |
|---|---|---|---|
| c   | read WTM[i*64+j], MPM[j] (and SRB[i] when j = 0) | | |
| c+1 | | SCE computes on the read data | |
| c+2 | | | MPM[j] written back; in FIRE the 4 spikes go to the SDMA |

MPM[j] is read again `n_grp` cycles later, in the next row. If `n_grp < 3`,
that read would come before the write-back had landed. Each row is
therefore padded to at least three cycles with *bubbles* (the `bubble`
status output). With `R = max(n_grp,3) * (n_pre + 2)` issue cycles, a
timestep takes `R + 5` cycles from accepting the input vector to offering
the output vector.

For a 256 x 256 layer that is 64 x 258 + 5 = 16 517 cycles, 0.132 ms at
125 MHz. The prototype reports 0.134 ms per timestep and 9.6 ms per
72-timestep sample. The full-size testbench measures 16 518 cycles per
timestep and 9.51 ms per sample. No synapse is skipped, so the time does
not depend on spike activity.

### SDMA

The SDMA (`sdma`) has three small jobs:

* It holds the next input vector in a one-entry buffer, filled with
  valid/ready.
* It turns a stream of weight words into WTM addresses. Words arrive
  i-major, `n_grp` words per presynaptic neuron.
* It gathers the output spikes into a 256-bit vector. The vector is offered
  downstream until the downstream side takes it.

A core starts a timestep only when its input buffer is full and its output
vector has been taken. Back-pressure therefore stalls the chain without
losing data.

## The chain of cores and the host interface

`snn_top` chains four cores. Core k's output vector is core k+1's input, so
core k works on timestep t while core k+1 works on t-1. The time per
timestep is set by the slowest layer. The `NLAYERS` register picks the core
whose output goes to the host: a three-layer network uses cores 0..2, and
core 3 idles.

Register map (AXI4-Lite, 32-bit registers, byte addresses):

| address | name | access | meaning |
|---|---|---|---|
| 0x000 | CTRL | W | bit0: clear all state (SRB, MPM, buffers); bit1: rewind the weight-load address of the target core |
| 0x004 | STREAM | RW | bits[1:0] target core for weights; bit8: 1 = stream carries weights, 0 = input spikes |
| 0x008 | NLAYERS | RW | active layers 1..4 (reset 4) |
| 0x00C | TSTEPS | R | output vectors sent since the last clear |
| 0x010 | BUSY | R | bits[3:0] busy flag per core |
| 0x100+16k | core k | RW | +0 n_pre (1..256), +4 n_grp (1..64), +8 lambda, +C v_th |

AXI4-Stream input, 64-bit:

* In weight mode, each beat carries one WTM word in bits [47:0].
* In spike mode, four beats form one input vector. Bit b of beat n is input
  neuron 64n+b.

The output stream sends four beats per timestep, with `tlast` on the fourth.

Programming sequence:

1. Write CTRL = 1 to clear.
2. Write NLAYERS, then the four core registers of each active core.
3. For each core: write STREAM = 0x100 | k, then CTRL = 2, then stream
   `n_pre * n_grp` weight words.
4. Write STREAM = 0.
5. Stream the input vectors, one per timestep, and read one output vector
   per timestep.
6. Clear between samples.

## Capacity and the evaluated networks

One core holds 256 x 256 synapses with their delays, so the four cores hold
262 144. The prototype's keyword-spotting network has 140 inputs and layers
of 256, 256 and 20 neurons, 106 k synapses. It maps onto cores 0..2: 140 x 64,
256 x 64 and 256 x 5 weight words, all within the 16 384 words of a core.
Its delays of up to 15 timesteps fit the 16-slot buffer. The 256-input
variant of that network fits the same way. The processor outputs spikes of
the last layer; the host makes the class decision.

## Departures and own choices

Taken from the publication:

* four chained cores
* per core: SRB, WTM and MPM memories, four SCE channels, an SDMA and a
  local controller
* 8-bit weights, 4-bit delays and 16-bit potentials
* the three phases and their order
* axonal loop order
* the WTM and MPM addressing (`i*64+j`, four channels per word)
* the pipeline spacing
* the `>` comparison
* reset by subtracting the threshold
* AXI4-Lite for configuration, AXI4-Stream for data

This design's own choices:

* **Head direction.** The head moves down, so that *delay + head* addresses
  the past.
* **Reset timing.** The threshold is subtracted in the fire phase, as the
  datapath description shows. The textbook equation subtracts
  `v_th * s[t-1]` in the next timestep, *after* the leak. The two differ by
  the leak applied to `v_th`.
* **Leak scale.** `lambda` is read as a fraction of 256, a shift by 8.
* **Saturation.** Adds and subtracts saturate to 16 bits. Overflow handling
  is not specified.
* **Bit packing and control.** The bit packing of WTM words, the register
  map, the stream formats and widths, the clear sequence and the
  valid/ready handshakes between cores.
* **Padding bubbles.** Rows of fewer than three groups are padded.
* **Output tap.** The output comes from a configurable last layer, not
  always from core 3.
* **SDMA internals.** The publication only names this engine.
* **Out of scope.** The ARM host, its DDR memory and its DMA engine are not
  part of this RTL. The testbenches act as the host on the AXI ports.
* **Memories.** These are plain arrays. A synthesis tool maps them to block
  RAM.

## Files

| file | contents |
|---|---|
| `rtl/snn_pkg.sv` | sizes, SCE modes, per-core configuration struct |
| `rtl/srb.sv`, `rtl/wtm.sv`, `rtl/mpm.sv` | the three memories of a core |
| `rtl/sce.sv` | one SCE channel |
| `rtl/local_ctrl.sv` | per-core schedule and pipeline control |
| `rtl/sdma.sv` | input buffer, weight address generator, output vector |
| `rtl/snn_core.sv` | one core |
| `rtl/cfg_unit.sv` | AXI4-Lite configuration unit |
| `rtl/ext_if.sv` | AXI4-Stream interface |
| `rtl/snn_top.sv` | the processor |
| `tb/snn_ref_pkg.sv` | reference model of one delayed-LIF layer |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_snn_top_full.sv` runs the full-size network |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_top_full.sv \
  --top-module tb_snn_top_full -o sim
obj_dir/sim
```

What each testbench covers:

* `tb_snn_top` runs four scenarios through the AXI ports: three layers,
  four layers with a two-group layer, one layer, and one layer driven into
  16-bit saturation. It checks every output spike against the reference
  model. It also requires that each of these happens at least once:
  * bubbles, output stalls, pipeline overlap, clears and mode switches;
  * leak steps, spikes arriving through a non-zero delay, fires with reset,
    and saturated additions.
* `tb_snn_top_full` loads the full-size 140-256-256-20 network with random
  weights and delays and runs a 72-timestep sample in a few seconds. It
  checks the output spikes and the per-timestep cycle count.
* `tb_snn_core` checks one core against the model, including the latency
  formula.
* `tb_local_ctrl` checks the exact issue schedule.

The tests use random weights and spikes. No trained network or benchmark
recording is included, so classification accuracy is not reproduced.
