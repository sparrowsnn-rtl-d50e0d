# SparrowSNN core — synthesizable SystemVerilog

SparrowSNN is a single-core inference engine for very small neural networks on
battery-powered biomedical sensors, such as heartbeat (ECG) or emotion (EEG)
classifiers. Its power budget is in the microwatts. Two ideas make it cheap:

* **Sum-spikes-and-fire (SSF).** A rate-coded spiking neuron only cares *how many*
  spikes each input sent during a window of T timesteps, not *when*. An SSF layer
  therefore takes the spike count of each input and does one multiply-accumulate per
  synapse, instead of T conditional additions. It then turns the window's sum into
  an output spike count with a single division by the threshold. Each weight and
  membrane potential is read once per window, not once per spike. The count is also
  never smaller than what a classic integrate-and-fire neuron would emit.
* **One small datapath with wide memories.** Every layer of the network runs on one
  multiplier, one adder and a 16-entry membrane buffer. Weights and activations come
  from two SRAMs with 128-bit ports, which cost less energy per bit, and local
  buffers cut the words down to 8-bit weights and 1–16-bit activations. A layer can
  be a quantised ANN layer, an integrate-and-fire (IF) SNN layer or an SSF layer.
  The intended model is a hybrid: ANN layers in front extract features, and SSF
  layers behind them classify cheaply.

This RTL implements the core from the published description: a block diagram, a
loop-level pseudo-code of the inference, the neuron equations and the memory sizes.
The published description leaves some points open, such as the register map, the
memory layout, the handshakes and the accumulator width. For each of these this RTL
makes a choice, and the choices are listed in
[Where this RTL fills in or departs from the published design](#where-this-rtl-fills-in-or-departs-from-the-published-design).

## The three neuron modes, as computed

All arithmetic is on integers. Weights and biases are signed 8-bit. The membrane
potential is a signed 16-bit value that **saturates** at its range and never wraps.
For output neuron *i* with inputs *j*:

| mode | accumulate (per synapse) | bias | output |
|------|--------------------------|------|--------|
| ANN  | `V += w_ji * x_j` (x_j: unsigned 1–16-bit activation) | `V += b_i` | `min(2^bits-1, (max(0,V) * M) >> S)` |
| SSF  | `V += w_ji * c_j` (c_j: input spike count) | `V += b_i * T` | `c_i = min(T, floor(max(0,V) / θ))` |
| IF   | for each timestep t where input j spiked: `V[t] += w_ji` | `V[t] += b_i` for every t | `v=0`; for t: `v += V[t]`; spike if `v >= θ`, then `v -= θ` |

* The SSF bias is multiplied by T because the bias is conceptually added at every
  timestep of the window. The multiply uses the same multiplier as the synapses.
* SSF clips its count at T. A threshold of 0 gives T for any positive sum.
* In IF mode, an input bit of 0 skips the addition, but the weight is still fetched.
  T is at most 31 for both IF and SSF. The membrane buffer holds 16 timesteps, so
  an IF window longer than 16 runs in two passes (see below).
* ANN layers use a per-layer integer multiplier `M` (8 bits) and right shift `S`
  (5 bits). Bias and products share one scale, so a model compiler must fold any
  separate bias scale into the stored bias.

An SSF layer's output field must be wide enough to hold T: 1, 2, 4, 8 or 16 bits,
for example 8 bits for T = 31. An IF layer emits T one-bit spikes per neuron. An IF
layer's input must be the network input or another IF layer with the same T. ANN
and SSF layers can follow each other freely.

## Datapath

```
 ext input ──┐ 128                               ┌───────────── config_regs
             ├─mux─► input_spike_buffer ──16──► ×  ◄── 8 ── weight_buffer ◄─128── weight_mem (64 KB)
 act_mem ────┘            │ 1 (IF spike)         │                   (16 x 8b select)
   ▲ 128                  └──────────────► IF/MAC select ─► + ◄──► membrane_buffer (16 entries)
   │                                                                   │
 output_spike_buffer ◄─ 1/2/4/8/16 ─ mux ◄─ comp_spike (IF, SSF) ◄─────┤
   │                                   ◄─ requant (ANN) ◄──────────────┘
   └─ values ─► classifier ─► class_o           controller (FSM) drives every block
```

| module | role |
|--------|------|
| `sparrow_pkg` | layer type enum, `layer_cfg_t`, sizes |
| `config_regs` | number of layers, input shape, per-layer configuration |
| `weight_mem` | 4096 x 128-bit weight/bias memory (64 KB), synchronous read |
| `act_mem` | 256 x 128-bit activation memory (4 KB), single port |
| `input_spike_buffer` | holds one 128-bit word; pops 1/2/4/8/16-bit fields, LSB first |
| `weight_buffer` | holds one weight word; selects one of its 16 weights |
| `mac_unit` | multiply-add (SSF/ANN), conditional add (IF), saturation |
| `membrane_buffer` | 16 per-timestep potentials (entry 0 is the SSF/ANN accumulator) |
| `comp_spike` | IF compare/subtract per timestep; SSF count by division and clip |
| `requant` | ANN ReLU, scale, shift, clamp |
| `output_spike_buffer` | packs outputs into 128-bit words; flushes at the end of a layer |
| `classifier` | arg-max of the last layer (lowest index wins ties) |
| `controller` | the FSM: loop order, addresses, enables |
| `sparrow_top` | the core |

## How an inference is sequenced

The controller runs the loops in this order: for each layer, for each output neuron,
for each input (and for each timestep of it in IF mode), accumulate; then add the
bias; then fire. One output neuron is completed before the next one starts. Its
inputs are therefore read again from the start for every output neuron. Each 128-bit
input word is read once per output neuron and then handed out field by field.

Controller states for one neuron:

1. `S_NEURON`: clear the membrane buffer and the IF potential, and request the first
   weight word and the first input word.
2. `S_LOAD`: load the requested words into the weight and input buffers.
3. `S_ACC`: one synapse per cycle (SSF/ANN) or one timestep per cycle (IF). When a
   step uses the last weight of a word or the last field of an input word, the next
   word is requested in the same cycle. The controller then spends one `S_LOAD`
   bubble and continues.
4. `S_BFETCH`, `S_BLOAD`: read the word that holds this neuron's bias.
5. `S_BIAS`: add the bias (1 cycle, or T cycles in IF mode).
6. `S_FIRE`: produce the output (1 cycle, or T one-bit spikes in IF mode) and push it
   into the output buffer. A full 128-bit word is written to the activation memory
   in the same cycle. In the last layer, the classifier sees each value.
7. `S_NEXT`, and at the end of a layer `S_FLUSH`, which writes any partial word.

**IF windows of 17 to 31 timesteps.** The membrane buffer has one entry per
timestep, and there are 16 entries. A longer IF window therefore runs each neuron
twice through steps 1–6:

* The first pass keeps timesteps 0–15 in entries 0–15.
* The second pass keeps timesteps 16 to T−1 in entries 0 onward.
* Both passes fetch the neuron's weights, pop all T spikes of every input, and
  accumulate only the timesteps that belong to the pass. The other pops take their
  cycle but write nothing.
* The IF potential `v` and the spike count are not cleared between the passes.
  The spikes therefore come out in timestep order, exactly as in one long pass.

This doubles the weight traffic of such a layer. Each weight is still read twice
per window, not T times.

Cycle count from the cycle after `start` to `done`:
`1 + Σ_layers [ 2 + Σ_neurons ( 1 + Σ_passes ( 4 + n_in·T' + 2·L + bubbles ) ) ]`.
Here T' = T for IF and 1 otherwise. L is the number of timesteps a pass owns: T'
in a single pass, or 16 and then T−16 in two passes. `bubbles` counts the
accumulate steps, after the first, at which a new weight word (every 16 inputs) or
a new input word (every 128 bits of input fields) begins. When both begin on the
same step, they count as one bubble.

At 100 MHz, an ECG-shaped hybrid network takes 13,387 cycles (0.134 ms). This
network has 180 inputs and layers 32-64-32-16-64: two 8-bit ANN layers, then SSF
with T = 31. The published latency of that model is 0.124 ms. An IF layer costs T
cycles per synapse per pass here, because it has one adder, so IF networks run several times
slower than the published IF latencies. An ECG-shaped all-IF network with T = 31
takes 727,291 cycles (7.3 ms), against a published 0.241 ms. The published IF
latencies imply a faster IF schedule, which is not described.

## Programming the core

**Configuration registers.** Write them through `cfg_we/cfg_addr/cfg_wdata`, one
32-bit write per cycle, while the core is idle:

| address | bits |
|---------|------|
| 0x00 | [2:0] number of layers (1–6) |
| 0x01 | [7:0] number of network inputs (up to 255); [10:8] input field code |
| 0x04+4·l | [1:0] type (0 IF, 1 SSF, 2 ANN); [15:8] width (1–128); [18:16] output field code; [28:24] T |
| 0x05+4·l | [15:0] threshold θ (IF, SSF) |
| 0x06+4·l | [7:0] ANN multiplier M; [12:8] ANN shift S |

A field code *k* means fields of 2^k bits: 1, 2, 4, 8 or 16.

**Weight memory.** Write 128-bit words through `wm_we/wm_waddr/wm_wdata`. Weight
*k* of a word occupies bits [8k+7:8k]. Layers are stored one after another from
address 0. Each layer is laid out as follows:

* Each output neuron's weights take `ceil(n_in/16)` words, in input order. Each
  neuron starts on a fresh word.
* After the last neuron come the layer's biases, sixteen to a word, in neuron order.

So layer *l* takes `width·ceil(n_in/16) + ceil(width/16)` words.

**Activations.** Fields are packed least significant first: value *j* of a b-bit
stream sits at stream bit `j·b`, and stream bit *p* is bit `p mod 128` of word
`p / 128`. An IF layer's stream holds neuron *j*'s spike at timestep *t* at bit
`j·T + t`. Layer *l* writes its outputs starting at activation-memory word
`128·(l mod 2)`, and layer *l+1* reads them from there.

**External input.** The first layer reads the network input in the same packed
format from the host, through an SRAM-like port. The core raises `ext_rd_en` with
a word address on `ext_rd_addr`. The host must drive that word on `ext_rd_data` in
the next cycle. The input is read again for every first-layer neuron, so the host
keeps it in a small buffer.

**Running.** Pulse `start` for one cycle while `busy` is low. `done` pulses for one
cycle at the end. `class_o` then holds the index of the largest last-layer output,
and for an IF last layer, of the largest spike count. The index stays valid until
the next `start`. Reset (`rst_n`, asynchronous, active low) clears all registers
but not the memories.

## Capacity

The weight memory holds 65,536 bytes, that is 4,096 words. Weight storage is
word-aligned per neuron, so usable capacity depends on the layer widths.

* The ECG network above needs 749 words.
* An EEG-shaped network (n inputs, then 128-32-32) needs at most 2,380 words for any
  n ≤ 255.
* Six full 128 x 128 layers would need 6,192 words. They do not fit, although each
  layer alone respects the 128 x 128 layer limit.

The activation memory is used as two halves of 128 words. A layer's output takes at
most 31 words of its half: 128 neurons x 16 bits is 16 words, and 128 IF neurons
x 31 timesteps is 31 words. The external input is at most 255 x 31 bits, that is
62 words.

## Where this RTL fills in or departs from the published design

* **Accumulator width.** The block diagram labels the membrane buffer "16 x 9b",
  while the energy discussion uses an 8b x 8b → 16b MAC. Nine bits cannot hold a sum
  of products, so 16 bits with saturation are used (`ACC_W` in `sparrow_pkg`).
* **Bias in SSF.** The SSF equation adds T·b, while the pseudo-code adds b once.
  The equation is followed.
* **Firing test.** The firing condition is `V ≥ θ`. The published reset equation
  says `>`, while its firing equation and algorithm say `≥`.
* **Requantisation.** It is a right shift. The pseudo-code writes a left shift,
  while the quantisation algorithm it implements shifts right. The ANN bias is not
  scaled separately.
* **IF window.** The published results include IF at T = 31. How that runs on a
  16-entry membrane buffer is not described. The two-pass schedule used here is
  this design's own. IF accumulation takes one timestep per cycle.
* **First-layer inputs.** The first layer accepts up to 255 inputs (8-bit width
  field), which covers the 180-sample ECG window. The published limit is 128 inputs
  per layer.
* **Chosen here, not published.** The register map, the memory layouts, the
  ping-pong use of the activation memory, the external-input port, the one-cycle
  read latency of both memories and the refill bubbles. So are the end-of-layer
  flush, the classifier's tie rule and the rule that IF layers only follow IF
  layers.
* **Memories.** They are written as arrays and synthesise to memory cells. In
  silicon they are compiled low-power SRAM macros.
* **Not built.** Zero-activation skipping with a narrow memory bus was rejected in
  the published design as a net energy loss, and is not built here either. Clock
  and voltage scaling is a system-level matter and is not modelled. The published
  throughput figure of about 180 inferences per second at 100 MHz does not match
  its own latency of about 0.12 ms per inference; the latency is the figure
  compared against here.

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_sparrow_top` runs 24 random networks end to end. A third are all-IF; the rest mix
  ANN and SSF layers, and some have 128-wide layers or six layers. It compares three
  things with a reference model of the arithmetic above: the class, the last
  layer's packed outputs in the activation memory, and the exact cycle count. It
  also checks that each mechanism occurred: IF, SSF and ANN layers; saturation; SSF
  clipping; ANN clamping; IF firing; two-pass IF windows; skipped zero-spike
  additions; weight and input
  buffer refills; and full and partial output-word writes.
* `tb_workloads` runs three networks at full size: the ECG- and EEG-shaped hybrids
  and an all-IF ECG network with T = 31. It checks them the same way. It also checks
  that the ECG hybrid's latency is within 20 % of the published one.
* `tb_controller` checks every address the controller issues and its cycle counts,
  against the documented layout and timing.
* The unit testbenches check each block against an independent model, with random
  and corner-case inputs.

The whole-core testbenches share `tb/sparrow_tb_common.svh`. To run one with
Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sparrow_pkg.sv tb/tb_sparrow_top.sv --top-module tb_sparrow_top
./obj_dir/Vtb_sparrow_top
```

Replace `tb_sparrow_top` with any other testbench name. Each runs in seconds.
Sizes are package constants in `rtl/sparrow_pkg.sv`. The memories take their
depth as module parameters.
