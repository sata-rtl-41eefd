# SATA in SystemVerilog: a sparsity-aware training accelerator for spiking neural networks

Backpropagation through time (BPTT) trains spiking neural networks (SNNs) well,
but it is expensive in hardware. Every forward operation is repeated for T
timesteps. The membrane potential U and the spikes S of every timestep must be
kept for the backward pass. The backward pass adds multi-bit multiply-accumulates
and a per-neuron recurrence for the potential gradient. SATA ("Sparsity-Aware
Training Accelerator", Yin et al., IEEE TCAD 2022) is a plain, Eyeriss-like
systolic design for this workload. Its purpose is to be a simple, general
platform for measuring what SNN training costs. It saves work wherever one of
three kinds of zeros appears:

| sparsity | where it comes from | what is skipped |
|---|---|---|
| S (spikes) | most inputs do not spike in a timestep | filter read and accumulate in forward and weight update |
| ∇U (potential gradient) | most dU values are zero | filter read and multiply-accumulate in the backward convolution |
| ∇f (firing gradient) | the surrogate derivative is zero outside a window around the threshold | the whole dS computation in the gradient unit |

This repository is RTL for that architecture at its main design point: VGG5
training, 8-bit data and T = 8 timesteps. That gives 128 processing elements
(PEs), 128 potential gradient units (PGUs), and four global buffers: W 144 KB,
U 256 KB, dU 256 KB, S 32 KB. The source paper describes the datapaths and the
dataflow, but not their control, number format or interfaces. Those parts are
this design's own and are marked as such below and in each file's header.

## What is computed

For layer l and timestep t, with leak α, threshold Uth and firing width β:

* Forward (leaky integrate-and-fire): `U_t = α·U_{t-1}·(1 − S_{t-1}) + W·S_t^{in}`,
  then `S_t = (U_t > Uth)`. The neurons of the network's last layer only
  integrate: `U_t = U_{t-1} + W·S_t^{in}`, with no leak and no spikes.
* Spike gradient: `dS_t = −α·dU_{t+1}·U_t + dH_t`. Here `dH_t = Wᵀ·dU_t^{next}` is the
  gradient coming back from the next layer (the backward convolution).
* Potential gradient: `dU_t = α·dU_{t+1}·(1 − S_t) + dS_t·f'(U_t)`, with the
  surrogate derivative `f'(U) = 1/β` when `|U − Uth| < β/2` and 0 otherwise.
* Weight gradient: `dW = Σ_t dU_t · S_t^{in}` (the weight-update convolution).

The reference values are α = 0.94, Uth = 0.75 and β = 2.5.

### Number format

All 8-bit values (W, U, dU, dH, dW) are signed **Q3.4**: value × 16, range
−8 … +7.94. So Uth = 12 and β/2 = 20. α is a shift-and-subtract,
`x − (x >>> 4)` = 0.9375·x. 1/β is approximated by `>>> 1` (0.5 instead of 0.4).
Every result written back to 8 bits saturates. Products in the backward
convolution are Q6.8 and are shifted right by 4 when written out. None of these
choices comes from the source, which only says "8-bit". They are constants in
`sata_pkg` and parameters on every module.

Spikes are bits. The T = 8 spikes of one neuron share one byte, with bit t being
timestep t. One 64-bit buffer word therefore holds U (or dU, or dH) of one neuron
for all 8 timesteps.

## Temporal weight-stationary dataflow

Each PE owns one output channel. Its filter scratch pad holds that channel's
C×R×R weights (up to 128×9 = 1152). The weights stay there for the whole layer.
For one output position the receptive field is broadcast to all PEs at once:
C×R×R input entries, each a byte carrying the spikes of all 8 timesteps. Each PE
then runs all T timesteps of its neuron before the next position is fetched.
The filters are fetched once per layer and reused T × (number of positions)
times, and a receptive field is fetched once for all timesteps. This follows
Fig. 5 of the source ("temporal weight stationary").

The top (`sata_top`) turns this into seven commands. K = `n_units` (number of
PEs/PGUs used) and N = `n_entries` (C·R·R). "B" is a byte address and "w" a
64-bit word address in the named buffer:

| command | reads | does | writes |
|---|---|---|---|
| `OP_LOAD_W` | W.B[a + k·N + i] | fill filter spad i of PE k | – |
| `OP_FWD` | S.B[a + i] | broadcast spikes, T timesteps of LIF | U.w[b + k] = U_0..7 of PE k, S.B[c + k] = its spikes |
| `OP_FWD_OUT` | S.B[a + i] | as `OP_FWD` for the output layer: integrate only | U.w[b + k], S.B[c + k] = 0 |
| `OP_BWD` | dU.B[a + t·N + i] for t = 0..7 | one MAC pass per timestep with transposed filters | dU.w[b + k] = dH_0..7 of PE k |
| `OP_WUP` | S.B[a + i], dU.w[b + k] | accumulate dU_t of PE k into psum[i] wherever spike bit t of entry i is set | (psum spads) |
| `OP_WREAD` | psum spads | read out and clear | W.B[c + k·N + i] = dW |
| `OP_PGU` | U.w[a + j], dU.w[b + j] (dH), S.B[c + j] | T backward steps per PGU | dU.w[d + j] = dU_0..7 |

A layer's training step is therefore: `OP_LOAD_W` once, then `OP_FWD` per output
position (`OP_FWD_OUT` in the last layer). For the backward pass: `OP_PGU` per 128 neurons, then `OP_BWD` (after
loading transposed filters) and `OP_WUP` per position, and finally `OP_WREAD`.
Rearranging data between these commands is left to the host behind the buffers.
That covers the im2col layout of receptive fields, laying out dU per timestep for
`OP_BWD`, transposing filters, moving data to and from DRAM, and applying
`W −= lr·dW`. The source does not describe that part either.

The host reaches the buffers through `host_*` while the accelerator is idle.
Writes take a word with byte enables, and read data arrives one cycle after
`host_re`. A command is accepted when `cmd_valid` and `cmd_ready` are both high;
`cmd_ready` is high only when idle. `done` pulses once at the end.

## The processing element (`pe`)

One datapath serves all three convolution stages (`mode`). It consumes one spad
entry per clock.

```
 input spad ──┬─ bit t ──(spike)──┐                  ┌───────────────┐
 (1152x8b)    │                   ├─ AND ─┐          │               │
              │  zero buffer ─mask┘       ├─ mux ─ + ─ acc ── LIF ── U_t, S_t
 filter spad ─┴─────────────── x (mult) ──┘      │                (FWD)
 (1152x8b)                                        └─ >>>4, sat ── dH_t (BWD)
 psum spad  ◄──── + ◄── AND(spike, dU_t) ─────────────── dW (WUP)
 (1152x8b)
```

* **Forward.** Each entry's spike bit for the current timestep selects whether
  the weight is added (an AND, not a multiply). A zero spike disables the
  filter-spad read and leaves the accumulator unchanged. After the N entries
  comes one extra cycle, in which `lif_unit` leaks the carried potential, adds
  the sum, compares with Uth, and records U_t and S_t. The potential carried to
  the next timestep is 0 if the neuron fired. In the output-layer variant
  (`STAGE_OUT`), the LIF unit's `integrate_only` input switches off the leak,
  the comparison and the reset.
* **Backward.** The input spad now holds one timestep's 8-bit dU. Writing it also
  writes the zero buffer, one bit per entry: 1 if the value is non-zero. That is
  the 144-byte buffer of the source, 1152 bits. During the pass, a 0 bit gates
  the filter read and the multiplier. The multiplier sees zero operands in the
  other two stages. One pass runs per timestep, and the top reloads the input
  spad in between.
* **Weight update.** The input spad holds spike bytes again. The second operand
  is the PE's own dU_t, loaded beforehand as a 64-bit word. For every entry whose
  spike bit is set, psum[i] += dU_t, read-modify-write in one cycle. Over all
  timesteps and positions, psum becomes dW for the PE's filter. The source says
  this stage reuses the forward datapath and its sparsity logic. Routing dU
  through the AND path and accumulating per entry in the psum spad is how this
  design realises that.

`st_mac`, `st_gated` and `st_spike` flag, per cycle, an accumulation done, an
accumulation elided by sparsity, and a spike fired. The arrays sum these flags
and the top keeps them as `stats`. These are the N(sp) operation counts of the
source's energy model, measured instead of estimated.

`pe_ctrl` is the PE control: N entry cycles and one end-of-step cycle per
timestep. A run of `n_steps` timesteps therefore takes `n_steps·(N+1)` cycles,
and `done` comes in the cycle after. Gated entries still take their cycle, since
the source gates to save energy, not time.

## The potential gradient unit (`pgu`)

A PGU takes one neuron: its U word, its spike byte and the dH word. Loading
stores the U values in a small scratch pad. At the same time, one `pgu_mask_gen`
per timestep writes the ∇f mask `|U_t − Uth| < β/2` into the PGU's zero buffer.
The unit then walks t = 7 … 0, one timestep per cycle, since dU_t needs dU_{t+1}
(dU_8 = 0):

```
a    = α·dU_{t+1}
dS   = sat8( (−a · U_t) >>> 4 + dH_t )        only when mask_t = 1
dU_t = sat8( (S_t ? 0 : a) + (mask_t ? dS >>> 1 : 0) )
```

When the mask is 0, the U read, the dH read, the multiplier and the dS adder are
all gated. This is ∇f sparsity, counted as `st_skip`. A neuron takes T cycles,
and `done` follows one cycle later. `pgu_array` loads its 128 PGUs one per cycle,
runs them together, and reads them back one per cycle.

## Global buffers (`glb`)

Each buffer is a plain memory array: 64-bit words, one registered read port, and
one write port with byte enables. The sizes are the source's: W 18432 words
(144 KB), U and dU 32768 words (256 KB each), S 4096 words (32 KB). The source
models these as SRAM (CACTI). Here they are arrays that a synthesis flow would
map to macros.

## Timing

Measured in clocks from the cycle `cmd_valid` is raised to the `done` pulse, and
checked by the end-to-end testbenches for every command:

| command | clocks | at N = 1152, K = 128, T = 8 |
|---|---|---|
| `OP_LOAD_W` | K·N + 4 | 147 460 |
| `OP_FWD`, `OP_FWD_OUT` | N + T·(N + 1) + K + 7 | 10 511 |
| `OP_BWD` | T·(2N + 5) + K + 3 | 18 603 |
| `OP_WUP` | N + K + T·(N + 1) + 8 | 10 512 |
| `OP_WREAD` | K·N + 3 | 147 459 |
| `OP_PGU` | 2K + T + 7 | 271 |

The compute part of a forward or weight-update command is T·(N + 1) clocks.
The rest is loading the receptive field one byte per clock and writing the K
results back one per clock. `OP_BWD` reloads the input spad for every
timestep, which is why it takes about twice as long.

The source gives no clock-level latency, so there is none to compare against.

## How far this follows the source

Taken from the source: the block structure of the PE, PGU and top. That covers
the three 128×9×8b spads, the AND path and multiplier, the LIF block, the
zero-buffer gating, the PGU datapath with its mask generator, and the four named
buffers. Also taken: all sizes (128 PEs, 128 PGUs, spads, 144-byte zero buffer,
buffer capacities), T = 8, the LIF and gradient equations, the threshold, leak
and firing width, and the temporal weight-stationary dataflow.

Choices of this design, where the source is silent:

* The Q3.4 format, saturation, and the shift approximations of α (0.9375) and
  1/β (0.5).
* Packing 8 timesteps of spikes into one input-spad byte.
* One spad entry per cycle, with gating modelled as enables rather than
  clock-gating cells.
* How the weight-update stage routes dU.
* The command set, buffer layouts, 64-bit words, host port and all control
  (`pe_ctrl`, `pgu_ctrl` and the sequencer in `sata_top`). The source names only
  a "PE control" and a "PGU control".
* The forward and backward running sums are kept in a 28-bit register inside
  each PE. The source's PE figure draws the adder's feedback through the psum
  scratch pad, which here is used only in the weight-update stage. The
  register cannot overflow over a 1152-term sum, and a PE works on one neuron
  at a time, so one sum is all it needs.
* dW saturates at 8 bits in the psum spad. The weight update itself is left to
  the host.

What the RTL does not cover:

* **Layers wider than the spads.** The VGG5 convolution layers fit: the largest
  is 128 channels × 3×3 = 1152 entries, 128 output channels, and 128·128·9 B =
  144 KB of filters. So does the 10-way output layer: it has 1024 inputs,
  10 outputs and 10 KB of weights, and runs with `OP_FWD_OUT`. The 1024-wide
  fully connected layer does not fit: it has 8192 inputs, 1024 outputs and
  8 MB of weights. Neither do VGG9's 256-channel layers, with 2304 entries.
  More output channels than PEs can be handled by running the filter groups
  one after another. More input entries than 1152 would need partial sums
  carried across passes before the LIF step, and this PE does not do that.
* **Other T or β.** These need the parameters changed (`T`; `HALF_BETA`,
  `BETA_SHIFT`). A run with T ≤ 8 is available at the default: the first T
  outputs of an 8-step run are the T-step result.
* **DRAM, its controller, and the host.** These stand outside the design.
* **The ANN baseline and the energy model.** The source compares against an ANN
  baseline and an energy model; neither is part of this design.

## Files

| file | block |
|---|---|
| `rtl/sata_pkg.sv` | number format, stage and command types, `sat8` |
| `rtl/spad.sv` | PE scratch pad (input / filter / psum) |
| `rtl/zero_buffer.sv` | PE zero-mask buffer |
| `rtl/lif_unit.sv` | leaky integrate-and-fire update |
| `rtl/pe_ctrl.sv` | PE control |
| `rtl/pe.sv` | processing element |
| `rtl/pe_array.sv` | 128 PEs with broadcast and readout |
| `rtl/pgu_mask_gen.sv` | ∇f mask generator |
| `rtl/pgu_ctrl.sv` | PGU control |
| `rtl/pgu.sv` | potential gradient unit |
| `rtl/pgu_array.sv` | 128 PGUs |
| `rtl/glb.sv` | global buffer |
| `rtl/sata_top.sv` | the accelerator: buffers, arrays, sequencer |
| `tb/sata_ref_pkg.sv` | integer reference model used by the testbenches |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_sata_top.sv` | one training step of one layer at reduced size (4 PEs) |
| `tb/tb_sata_full.sv` | full default size: 128×128×3×3 filters, one position through forward, PGU, backward, weight update and dW readout |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. Each has
a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sata_pkg.sv tb/sata_ref_pkg.sv tb/tb_sata_top.sv --top-module tb_sata_top
./obj_dir/Vtb_sata_top
```

Replace `tb_sata_top` with any other testbench name. The full-size test
(`tb_sata_full`) runs in under a minute. It uses every parameter at its
default. One output position goes through every command at full width: 128
output channels and 1152-entry receptive fields. The test checks all 128 U
words, spike bytes, dU and dH words and all 147 456 dW bytes against the
model, as well as every command's latency. The end-to-end test `tb_sata_top` checks every value written back by
each command, and each command's latency.
It also requires that every sparsity mechanism occurs at least once: spike
gating, dU gating, LIF firing and reset, saturation, and computed and skipped
dS. It also requires the output-layer forward to give a result that differs
from the LIF one.

To change the size, override the `sata_top` parameters: `NUM_PE`, `NUM_PGU`,
`DEPTH` (spad entries), the four `*_WORDS`, `T`, and the arithmetic constants.
`T` must be a power of two, since one word holds T bytes.
