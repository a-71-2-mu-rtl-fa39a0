# RSNN speech recognition accelerator core

This core runs a small recurrent spiking neural network (RSNN) for phoneme
recognition in real time. It processes one 10 ms speech frame at a time and
keeps every weight on chip. At each frame it takes 40 8-bit acoustic
features, runs them through two recurrent layers of 128 leaky
integrate-and-fire (LIF) neurons, and computes a 128 → 1920 fully connected
(FC) layer. The 1920 12-bit FC results go out to an external decoder. Each
frame is evaluated over one or two SNN time steps, chosen at run time.

Three ideas decide the architecture:

* **Parallel time steps.** There are two sets of 128 accumulating PEs.
  With two time steps, set 1 computes time step 1 and set 2 computes time
  step 2 at the same time, using the same weight row. Each weight is read
  from SRAM once per frame, not once per time step.
* **Zero skipping with broadcast.** All inputs are binary, either spikes or
  the bits of an 8-bit feature. A row of 128 weights (one per output
  neuron) is read only for a nonzero input, and that input is broadcast to
  all 128 PEs. An input group of 8 bits therefore costs one cycle per 1
  bit, not 8 cycles.
* **Merged spikes in the FC layer.** The FC layer is linear. This means
  `s1·w + s2·w = (s1 + s2)·w`, and `s1 + s2` is 0, 1 or 2. The core reads the
  row for `s1 OR s2` and shifts the weight left by `s1 AND s2`. Both time
  steps of the FC layer then cost one pass.

All arithmetic uses integers:

* weights are 4-bit two's complement;
* accumulators, stimuli and membranes are 12 bits and saturate at
  −2048 / +2047;
* the decay β and the threshold V<sub>th</sub> are powers of two.

## The network a frame computes

For layer ℓ, frame t and time step ts ∈ {1, 2}:

```
U[t][ts] = x[t][ts]·Wx + h[t-1][ts]·Wh + (ts == 2 && !h[t][1] ? U[t][1] >>> beta_sh : 0)
h[t][ts] = U[t][ts] >= 2^vth_exp
```

The terms are as follows:

* For layer 0, `x` is the input feature vector, and it is the same for both
  time steps. For layer 1, `x` is layer 0's spikes of the same time step.
* `h[t-1][ts]` is the layer's own spikes of the previous frame at the same
  time step. These are the recurrent inputs.
* The membrane carries over only from time step 1 to time step 2 of a
  frame. A neuron that fired is reset, so no membrane is carried for it.
* The FC output of a frame is `y[t] = Σts h1[t][ts]·Wfc`.
* `beta_sh` and `vth_exp` are set separately for each layer in the control
  register.

## Datapath

```
 load port ─┬─► in buffer (48×8b) ─────────┐
 (128 bit)  │                              ▼
            │   spike register set ──► 2 zero-skipping units ──► weight address generator
            │   (2 layers × 2 ts × 128)     │ shift, enable                │
            │        ▲                      ▼                              ▼
            └────────┼──────────────► 5 weight buffers (48, 192, 192, 960, 960 rows × 512b)
                     │                      │ 512-bit row = 128 weights
                     │                      ▼
                     │        PE set 1 (128 × 12b)   PE set 2 (128 × 12b)
                     │                      │               │
                     │              feed/out registers 1, 2 + adders ──► out (4 × 12b per beat)
                     │                      │ stimulus
                     └──────────── LIF set (128 neurons) ◄──┘
```

A PE adds `w <<< sh` to its accumulator when its enable is set. The
zero-skipping units drive the enable and shift of their PE set. The enable
and shift pass through one register, so they reach the PEs in the same
cycle as the weight row, which the SRAM returns one cycle after the
address.

## Frame schedule

The state machine starts in **Start**. It then passes through:

1. **Load Instructions**, where the configuration is latched and the spike
   registers are cleared;
2. **Load Weights**;
3. **Load Inputs**.

After that it loops over five layer phases for every frame:

| phase          | zero-skip type, 2 ts | PE set 1 / PE set 2, 2 ts | 1 ts |
|----------------|----------------------|---------------------------|------|
| L0-input       | A | low / high nibble of each feature byte, same input-weight row; results added → feedforward regs | same |
| L0-recurrent   | D | ts1 / ts2 spikes of h0[t-1], shared row | B: inputs 0–63 / 64–127, own buffer each, results added |
| L1-feedforward | D | ts1 / ts2 spikes of h0[t] → regs 1 / 2 | B, halves added |
| L1-recurrent   | D | ts1 / ts2 spikes of h1[t-1] | B, halves added |
| FC (7 passes)  | C | output group 2p / 2p+1, same merged spikes | B |
| FC (last pass) | C | inputs 0–63 / 64–127 of group 14, results added | B |

Each phase runs four sub-phases:

* **INIT**: clear the PEs and load the first group into each unit.
* **RUN**: scan the groups.
* **DRAIN**: one cycle for the last SRAM read.
* **POST**: store the results, or run the LIF set and write the spikes
  back, or hand FC results to the output registers.

In the recurrent layers, POST runs the LIF set once per time step, one
cycle each. Spikes are written back into the spike register set. Layer 0's
new spikes are then read by L1-feedforward. The old contents act as
h[t-1] until they are overwritten.

Where both PE sets use one weight row, the two units run in **lockstep**.
This covers type A, type D, and the FC paired passes. In lockstep a unit
that finishes its group early waits for the other before both load the next
group. Where each set has its own buffer, the units advance independently.
This covers one-time-step recurrent layers and the split last FC group.

A finished FC group is copied to the output registers. It then streams out
4 values per beat on a valid/ready port, with `out_last` on every 32nd
beat. POST of the next FC pass stalls while the previous group is still
streaming, so a slow consumer slows the FC layer but loses nothing.

The input buffer is released at the end of L0-input. The host can therefore
write the next frame while the other layers run.

## Zero-skipping types and cycle cost

Each unit takes an 8-bit group and emits the position of one 1 bit per
cycle, lowest first. Scanning a group costs `max(1, number of emissions)`
cycles. The four types differ in which bits they scan:

| type | scans | shift to PEs | use |
|------|-------|--------------|-----|
| A | 4 bits of the input byte (unit 1: bits 0–3, unit 2: bits 4–7) | bit index | L0-input |
| B | spikes of one time step | 0 | all layers with one time step |
| C | `A OR B` of the two time steps' spikes | `A AND B` (0 or 1) | FC with two time steps |
| D | all 8 positions, nothing skipped | 0; the spike bit gates each PE set | recurrent layers with two time steps |

Type D does not skip because the two time steps share one weight row but
have different spikes. Skipping both sets of zeros would need two rows per
cycle, that is a dual-port SRAM.

Scan cycles per frame, when no zeros can be skipped:

* one time step: `40·4 + 3·64 + 7·128 + 64 = 1312`;
* two time steps: `40·4 + 3·128 + 7·128 + 64 = 1504`.

The published dual-PE figure for one time step is 1312. With real spike
sparsity the published counts are 574 cycles (one time step) and 895
(two). A frame adds about 55–65 cycles for INIT, DRAIN and POST, plus any
output stalls.

## Weight memory layout

Each 512-bit row holds 128 signed 4-bit weights, one per output neuron.
Weight j sits at bits `[4j+3:4j]`. The rows are:

| buffer | rows | row index |
|--------|------|-----------|
| input weights | 48 | feature f (0–39) |
| spike weights 1 | 192 | `L·64 + i` for spike input i = 0–63 |
| spike weights 2 | 192 | `L·64 + (i − 64)` for spike input i = 64–127 |
| FC weights 1 | 960 | `p·128 + i` holds output group 2p (p = 0–6); `896 + i` for i = 0–63 of group 14 |
| FC weights 2 | 960 | `p·128 + i` holds output group 2p+1; `896 + (i − 64)` for i = 64–127 of group 14 |

In the spike weight buffers, L selects the matrix: L = 0 for layer-0
recurrent, L = 1 for layer-1 feedforward, L = 2 for layer-1 recurrent. An
FC output group is 128 consecutive outputs. Weights that were pruned are
stored as 0. This layout fills the 3×64 spike rows and the 7×128 + 64 FC
rows exactly.

### Load port

Weights and inputs arrive on a 128-bit valid/ready port. `ld_addr` is
decoded as follows:

* `[14:12]` selects the target: 0 = in buffer, 1 = input weights,
  2 = spike weights 1, 3 = spike weights 2, 4 = FC weights 1,
  5 = FC weights 2.
* `[11:2]` selects the row.
* `[1:0]` selects the 128-bit quarter of the row (weights 32q to 32q+31).
  For the in buffer it selects the beat of 16 bytes.

Weight writes are accepted only in Start, Load Instructions and Load
Weights. Input beats are accepted whenever the in buffer is not full.

## Control register

Writes are 32 bits. Command bits give one-cycle pulses and are not stored.

| bits | write | read |
|------|-------|------|
| 0 | start | running (not in Start) |
| 1 | weights done | weights may be loaded |
| 2 | stop (return to Start after the current frame) | in buffer full |
| 3 | two time steps | same |
| 6:4, 9:7 | β shift, layer 0 / layer 1 | same |
| 13:10, 17:14 | V<sub>th</sub> exponent, layer 0 / layer 1 | same |
| 31:18 | ignored | frames completed |

A run has these steps:

1. Write the configuration together with `start`.
2. Load all weights.
3. Write `weights done`.
4. Keep feeding 3 input beats per frame and draining the output port.

`frame_done` pulses at the end of every frame. `frame_cycles` gives the
length of the last frame from L0-input to the end of FC.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl rtl/rsnn_pkg.sv rtl/*.sv tb/tb_rsnn_top.sv --top-module tb_rsnn_top
./obj_dir/Vtb_rsnn_top
```

`tb_rsnn_top` runs the full-size core with no parameter overrides. It
contains an integer model of the whole network, with the same saturation
points and accumulation order as the hardware. The test does the
following:

* Loads random sparse weights and runs 9 frames: two time steps, one time
  step, and dense frames in both modes.
* Checks all 1920 outputs of every frame against the model.
* Checks the scan cycles of every frame against a count derived from the
  spike patterns.
* Checks the dense one-time-step frame against the published 1312 cycles.
* Counts the mechanisms and fails if any never occurs: output
  back-pressure, empty groups, merged spikes doubled, lockstep waits, POST
  stalls, input loads interleaved with computation, membrane carry-over,
  and saturation.

In the sparse frames about 40% of the input bits and 25–36% of the spikes
are ones, which is close to the published sparsity. Those frames scan for
769–935 cycles with two time steps and 362–457 with one (published: 895
and 574). Total frame lengths are 778–1156 cycles, because the output port
is ready only 75% of the time. A consumer that is always ready shortens
them.

The unit testbenches check the zero-skipping unit against the published
examples, and each module against its own reference computation. The
controller is checked with random unit and stream timing.

## Where this design departs from the publication, or fills gaps

* The publication describes the blocks and data flows but not their
  interfaces. This design chose all of the following: the register
  layout, the load address map, the weight row layout, the handshakes,
  the sub-phase sequencing and the emission order.
* The DMA controller, AXI bus, host processor and DRAM around the core are
  not included. The core exposes a plain load port and control port
  instead.
* Saturating 12-bit arithmetic is assumed. The publication gives only the
  width.
* The membrane potential is not carried from one frame to the next. Only
  spikes are recurrent across frames.
* Clock and power gating of idle logic and buffers, which the publication
  credits for part of its power figure, is not modelled. Only the SRAM
  enables are gated.
* The weight buffers are inferred arrays that stand in for SRAM macros.
* The published real-sparsity cycle counts (574 and 895) could not be
  reproduced without the trained model and the speech features. Only the
  dense counts are checked.

## Files

`rtl/rsnn_pkg.sv` holds the shared types. `rtl/rsnn_top.sv` is the core.
Its blocks are:

* `pe`, `pe_set`: the processing elements;
* `zero_skip`: the zero-skipping unit;
* `lif_set`: the LIF neurons;
* `spike_reg_set`: the spike register set;
* `in_buffer`: the input buffer;
* `weight_sram`: the weight buffers;
* `weight_addr_gen`: the weight address generator;
* `feed_out_regs`: the feedforward/output registers;
* `ctrl_reg`: the control register;
* `rsnn_controller`: the controller.

The testbench for each block is `tb/tb_<module>.sv`.
