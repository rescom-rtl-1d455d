# ReSCom — a spiking neural network accelerator with stochastic multipliers

ReSCom evaluates fully connected spiking neural networks (SNNs) using a
mixed arithmetic. Multiplications inside the neuron dynamics are done in
stochastic computing (SC): each operand becomes a random bit-stream, one AND
gate per bit multiplies, and a ones counter brings the product back to
binary. Everything else stays exact fixed point. That covers the weighted sum
of the input spikes, the membrane and current updates, and the threshold
test. The point is that the recurrent state update (membrane potential fed
back every time step) never accumulates additive SC error. Only the bounded
error of an SC multiplication enters it. The stream length sets how large
that error is, and it is chosen at run time. Longer streams give more
accuracy and cost more cycles and energy.

A single neuron datapath implements three neuron models, picked by a 2-bit
mode:

| mode | model | update (per time step, `x` = weighted input sum) |
|---|---|---|
| 0 | IF (integrate-and-fire) | `v = v + x` |
| 1 | LIF (leaky IF) | `v = α·v + x` |
| 2 | Synaptic (second order) | `I = β·I + x`, then `v = α·v + I` |
| 3 | reserved | state held, no spikes |

Here `α·` and `β·` are stochastic products. When the new `v` is above the
threshold, the neuron spikes and the threshold is subtracted from `v`.

The RTL is configured by default as a 256-256-10 network: 16×16 images,
256 hidden neurons, 10 classes, as used for MNIST. It simulates at that size.

## Block diagram

```
 pixels (host) ──► input_interface ──spikes[256]──► snn_layer (hidden, 256) ──spikes[256]──►
                     │  rate encoder,                 │ weight_bram 64K x 16
                     │  own LFSR                      │ fc_module, 256 neurons
                                                      ▲
                          lfsr (state streams) ───────┤
                          lfsr (α/β streams)  ────────┤
                                                      ▼
 ──► snn_layer (output, 10) ──spikes[10]──► output_interface ──► class_id, counts[10]
       weight_bram 4K x 16                    spike counters + argmax
```

`rescom_top` holds a small sequencer. For each time step it runs the
encoder, then the hidden layer, then the output layer, and then adds the
output spikes to the counters. These stages run one after another, never
overlapped.

## Numbers and streams

* **Fixed point.** States, weights and the threshold are 16-bit two's
  complement with 12 fraction bits (Q3.12, range ±8, 1.0 = 4096). Every
  addition saturates to 16 bits. The FC sum is formed in 32 bits first and
  then saturated.
* **Decay factors** α and β are 8-bit unsigned values that stand for
  value/255. For example, 250 ≈ 0.98 and 230 ≈ 0.9.
* **Random numbers** come from 8-bit LFSRs whose polynomial and seed can be
  loaded (`lfsr.sv`). A maximal polynomial gives each value 1..255 once per
  period. The design has three LFSRs:
  * one for the input encoder;
  * one for the neuron-state streams;
  * one for the α/β streams.

  Keeping the two operands of each AND on separate LFSRs makes their streams
  uncorrelated. Correlated streams would multiply wrongly.
* **Stream generation (`sng`).** On each `sht` clock, `op >= rnd` is
  shifted into a shift register. For `rnd` uniform on 1..255, each bit is 1
  with probability op/255.
* **Stochastic multiplication (`sc_multiplier`).** A signed state `x` is
  handled in sign–magnitude form:
  1. The magnitude is saturated below 2.0, and its top 8 bits under the 2.0
     weight give `op`. The stream therefore stands for |x|/2.
  2. This stream is ANDed bit by bit with the factor's stream.
  3. The ones are counted.
  4. The product is `ones · 2.0 / L`. Because L = 2^len_log2, this is a
     shift.
  5. The sign of `x` is applied.

  The resolution is 2/L: 0.125 at L = 16. States of magnitude 2.0 or more
  are multiplied as if they were just below 2.0. This coarse quantisation
  is what the run-time stream length trades against latency.

## The neuron (`neuron.sv`)

Each neuron has two state registers, `v_mem` and `I_t`, and two stochastic
multipliers: `alpha·v_mem` and `beta·I_t`. Exact adders form three candidate
next values:

* `v_mem_next_if = v_mem + x`
* `v_leaky_next = α·v_mem + x`
* `v_mem_next_syn = α·v_mem + (β·I_t + x)`

A mode multiplexer picks one of them. `I_t` takes `β·I_t + x` in Synaptic
mode and 0 otherwise.

The neuron is event driven: its registers change only in the single cycle
in which the layer strobes it (`valid`). Before that strobe, the layer gives
it one `clr` cycle and then L `sht` cycles. During those cycles `v_mem` and
`I_t` do not change, so the streams describe the current state. `spike`
keeps the result of the last update until the next one.

## A layer (`snn_layer.sv`) and its schedule

A layer has one physical neuron per logical neuron (256 in the hidden
layer), but only one **shared FC module**. The FC module holds one weight
register per input, a multiplexer per register (the weight if that input
spiked, else 0), and an adder tree. It computes the weighted sum for one
neuron at a time. Neuron j of a layer with N_IN inputs is evaluated in
three phases:

| phase | cycles | what happens |
|---|---|---|
| load | N_IN | BRAM reads at `{j, i}` for i = 0..N_IN−1. Word i is written to FC register i one cycle later. The first cycle also clears neuron j's stream registers and the α/β stream registers. |
| stream | L = 2^len_log2 | The weight registers are stable. On each `sht` cycle, neuron j's two state streams and the shared α/β streams take one bit, and both stream LFSRs step once. |
| update | 1 | Neuron j takes the FC sum and updates. |

One neuron takes N_IN + L + 1 cycles. A layer pass over N_NEUR neurons ends
N_NEUR·(N_IN+L+1) + 1 cycles after its `start`.

Two controllers run the schedule:

* **`load_controller`**, a state machine IDLE → LOAD → WAIT → EVAL → … →
  DONE:
  * `ld_valid` and `inc_weight_addr` are high while loading;
  * `ld_completed` lasts one cycle, when the last weight is written;
  * `ld_param` lasts one cycle on `start_param`. It latches the run-time
    parameters and clears every neuron's state.
* **`rom_controller`**:
  * keeps the neuron and weight indices and forms the address from them;
  * flags the last address (`ld_w`);
  * runs the stream counter against `num_bit = 2^len_log2` (`co` on the
    last stream cycle);
  * strobes the selected neuron (`upd`, `ld_w_neuron_out`);
  * reports `co_neuron` and `process_completed`.

An OR of `ld_param` and `start` clears the indices (`ld_weight`).

**Weight memory map.** A layer's memory address is
`{neuron index, input index}`. For the 256×256 hidden layer this is
`{8 bits, 8 bits}`, filling 0x0000–0xFFFF. Each neuron's weights sit in a
contiguous block of 256 words. The 10-neuron output layer uses
`{4 bits, 8 bits}`.

## Top level (`rescom_top.sv`)

Ports:

* `pix_we/pix_addr/pix_data`: the 256 pixels of an image (0..255). The host
  prepares these: down-sampling 28×28 to 16×16, then flattening.
* `w_we/w_layer/w_addr/w_data`: weights. `w_layer` is 0 for the hidden
  layer and 1 for the output layer. The address is `{neuron, input}`.
* `lfsr_ld`, `lfsr_poly[3]`, `lfsr_seed[3]`: LFSR loading. Index 0 is the
  encoder, 1 the state streams, 2 the α/β streams. 8'h1D, 8'h2B and 8'h2D
  are maximal polynomials in this LFSR's convention.
* `mode`, `thr`, `alpha`, `beta`, `len_log2` (0..4), `num_steps` (≥ 1):
  run-time parameters.
* `start`: pulse to classify one image. `busy` stays high until `done`
  pulses. `class_id` and `counts[10]` then stay valid until the next start.

At every start the layers latch the parameters and clear their neuron
states.

**Latency.** From the start cycle to the done cycle, with L = 2^len_log2:

    2 + num_steps · (N_IN + N_HID·(N_IN+L+1) + N_OUT·(N_HID+L+1) + 7)

For 256-256-10, L = 16 and 10 time steps, this is 728,812 cycles, or
7.29 ms at 100 MHz. The reference figure for this architecture is 7.24 ms
per image at 100 MHz. Almost all the time goes to the sequential loading of
weights: 256 cycles per neuron against 16 stream cycles.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. `tb/rescom_model_pkg.sv` is a bit-exact
reference model written from the block descriptions above. It models the
LFSRs, the encoder, the streams, the ones counts and the neuron equations.
The layer and top-level tests compare the RTL against it spike for spike.

| testbench | what it runs |
|---|---|
| `tb_lfsr`, `tb_sng`, `tb_sc_multiplier` | random-number and stream primitives; product exactness for L = 1..16; mean product accuracy |
| `tb_neuron` | 400 updates over all modes and lengths; hold without `valid`; `init` |
| `tb_fc_module`, `tb_weight_bram` | gated sum with saturation; the full 64K-word memory |
| `tb_load_controller`, `tb_rom_controller` | controller sequencing cycle by cycle |
| `tb_snn_layer` | a 12-input, 5-neuron layer in each mode: spikes and pass latency |
| `tb_input_interface`, `tb_output_interface` | encoder spikes and rates; counters and argmax |
| `tb_rescom_top` | 16-8-4 network, end to end (see below) |
| `tb_rescom_full` | default 256-256-10 size, one image, LIF, L = 16, 10 steps |
| `tb_length_sweep` | 16-8-4 network built with `MAX_LEN = 1024`; IF, LIF and Synaptic at L = 16 .. 1024; multiplier error per length |
| `tb_rescom_pkg` | the saturation function and the format constants |

`tb_rescom_top` runs images in all four modes and two stream lengths, with
an LFSR reload, a saturating FC sum and a start while busy. It fails if any
of these never happened. `tb_rescom_full` checks all spike counts, the class
and the 728,812-cycle latency. It takes a few seconds.
`tb_length_sweep` repeats the stream-length study: every mode and length is
checked against the model, and a stand-alone multiplier reports the mean
error of a product. That error falls from 0.106 at L = 16 to 0.031 at
L = 256 and 0.019 at L = 512, then flattens (0.016 at L = 1024). The
8-bit random numbers and operands limit the accuracy of the longest
streams. The sweep takes under a minute.

With plain Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_rescom_full \
        rtl/rescom_pkg.sv tb/rescom_model_pkg.sv tb/tb_rescom_full.sv rtl/*.sv
    ./obj_dir/Vtb_rescom_full

The same pattern works for every `tb_<block>`. The network tests are
self-consistency checks against the model, with random weights. No trained
weights or dataset are included, so classification accuracy is not
measured.

## Where this RTL departs from, or fills in, the reference architecture

The block structure, signal names, stream mechanism, memory map, sizes and
stream length follow the published architecture. Everything below is this
implementation's own choice, because the description leaves it open, or a
knowing deviation from it:

* **Number formats.** Q3.12 states, saturation everywhere, and the
  sign–magnitude SC encoding with its 2.0 range.
* **Reset.** The threshold is subtracted right after a spike. snnTorch, for
  comparison, applies the subtraction in the next step.
* **Decay names.** The neuron figure names the factor on `v_mem` α and the
  factor on `I_t` β. The training table uses the snnTorch convention, where
  β = 0.98 is the membrane decay and α = 0.9 the current decay. The ports
  keep the figure's names. The tests load 0.98 on the membrane factor and
  0.9 on the current factor.
* **LFSR taps.** Every stage, the last one included, is gated by one
  polynomial bit. The LFSR figure labels one tap more than it draws.
* **Per-neuron memory size.** A neuron owns 256 words, as the address split
  shows. One drawing of the memory shows 16-word regions.
* **Encoder.** It uses one uniform LFSR (Bernoulli spikes) and encodes one
  pixel per cycle. Normal- and Poisson-distributed sources are mentioned in
  the description but not specified, so they are not built.
* **Streams.** The α/β streams are generated in the layer and shared by all
  neurons, from their own LFSR.
* **Sequencing and handshakes.** The controller state machines, the host
  write ports for pixels and weights, the stream-length encoding
  (`len_log2`) and the top-level sequencing are this implementation's own.
* **Stream length range.** The default maximum stream length is 16, the main
  operating point. The longer lengths of the accuracy/energy sweep (32 up to
  1024) need `MAX_LEN` raised. Every neuron's stream registers grow
  accordingly.
* **Memory.** The weight memory is a plain synchronous array, not mapped to
  specific FPGA block RAMs.

## Changing it

* Sizes are parameters of `rescom_top`: `N_IN`, `N_HID`, `N_OUT`,
  `MAX_LEN` and `COUNT_W`. `N_IN` and `N_HID` should be powers of two,
  because they set the address fields.
* The fixed-point split is in `rescom_pkg` (`FRAC_W`). The SC operand
  encoding in `sc_multiplier` assumes 12 fraction bits.
* For a different neuron model, add a mode code in `rescom_pkg::mode_e` and
  a candidate next value in `neuron.sv`.
