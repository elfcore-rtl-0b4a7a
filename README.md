# ElfCore: an on-line learning spiking neural network core in SystemVerilog

ElfCore is a digital processor for a small spiking neural network (SNN). It
keeps learning while it runs on a stream of sensory events. The network is
fixed at **(512)-512-512-16**: 512 input channels, two hidden layers of 512
leaky integrate-and-fire neurons, and 16 output neurons. Three mechanisms
make learning on the chip cheap.

1. **Online self-supervised learning (OSSL).** Each hidden layer learns
   from local signals only, with no labels and no back-propagated error. The
   learning signal has two parts:
   - *predictive coding (PC)* within a sample: a neuron should fire when its
     recent past predicted it;
   - *contrastive coding (CC)* across samples: the response should differ
     from the one at the end of the previous sample, which most likely
     belonged to another class.

   Only the 16-neuron output layer uses labels (supervised learning, SL).
2. **Dynamic structured sparse training (DSST).** Every hidden-layer weight
   matrix is N:M sparse from the start. Every now and then the weakest
   connections are pruned and the same number are regrown where the learning
   signal is strongest. The number of stored synapses never changes.
3. **Activity-dependent weight-update gating.** A layer skips its whole
   weight update for a time step in two cases:
   - the input is quiet;
   - the layer's similarity scores show there is nothing to learn.

   Presynaptic neurons with nothing to contribute are skipped one by one
   (zero skipping).

The RTL in `rtl/` builds all of this at full size. Some parts follow the
published description closely and others had to be chosen. Both are marked
below and in each file's opening comment.

## Network organisation: N:M groups, rows and slots

The D = 512 neurons of a hidden layer are split into G = 4 groups of
M = 128 neurons. Each group has its own processing element (PE) with two
memories:

* a **neuron memory**: 128 words of `{u, e_cur, e_old, e_last, g}` (see
  below);
* a **synapse memory**: for each of the 512 presynaptic neurons, a row of
  `N_MAX = 16` weight&index words. Each word holds an `int8` weight and a
  9-bit index of the post-neuron in this group that the synapse reaches.

A presynaptic neuron therefore reaches at most 16 of the 128 neurons of each
group, for 64 synapses per neuron and layer. This is an N:M structure with
N ≤ 16, M = 128, and a minimum sparsity of 87.5 %. The register `n_act`
(1..16) sets how many slots of each row are in use.

Because every row has the same length, the layer can be processed **input
stationary**. The PEs walk the rows of the presynaptic neurons that are
active. Every cycle each PE takes one word of the row, applies the
presynaptic spike and trace to the addressed post-neuron, and writes both
back. A presynaptic neuron that neither spiked nor carries a trace costs one
cycle. With the weight update gated off, having no trace does not count.

At initialisation, slot k of presynaptic neuron i in group q points to
post-neuron `q*M + (k*M/N_MAX + i) mod M`, so every post-neuron receives the
same number of synapses (uniform N:M). The weight is a random int8 value
divided by 4. The regular pattern is this design's choice.

The output layer is dense, with 512 × 16 int8 weights. Sixteen neurons sit
in a register file. Each output neuron has a spike counter, and there are
two arg-max units: one for the largest count and one for the largest
membrane potential.

**Bypass.** `n_hidden` selects what drives the output layer:

| `n_hidden` | Output layer input | Hidden layers |
|---|---|---|
| 0 | the input spikes | neither runs |
| 1 | hidden layer 1 | layer 2 does not run |
| 2 | hidden layer 2 | both run |

Layers that are bypassed are never started, so they cost no cycles.

## Neuron state and the learning signals

Each neuron keeps three traces, one for each time scale the learning rules
need:

| field | meaning | used by |
|---|---|---|
| `e_cur` | trace at this time step, e^t | the weight update, as a *presynaptic* trace |
| `e_old` | trace one step earlier, e^{t-1} | predictive coding |
| `e_last` | trace at the last step of the previous sample, e_prev | contrastive coding |

Traces are 8-bit unsigned values with 4 fractional bits, so a spike adds 16.
Membrane potentials are 16-bit signed. Decays β are fractions /256. Every
multiplication by β is rounded stochastically: random bits from a 16-bit
LFSR are added below the cut.

**Neuron dynamics (ND).** This step runs once per time step for every
neuron. Each group takes 128 cycles and the four groups work in parallel.

```
spike = u > θ
u    <- Stoc(β·u) − θ·spike
e    <- Stoc(β·e) + 1.0·spike          (e_old takes the previous e)
e_last <- e                           on the last time step of a sample
H_PC += spike ? e_old  : 0            predictive similarity
H_CC -= spike ? e_last : 0            contrastive similarity
g     = h(u) · (e_old − e_last) >> 8  post-gradient, stored in the neuron word
```

`h(u)` is a straight-through-estimator surrogate derivative read from a
16-entry table. It is a triangle centred on θ, with bins of width 8 and
values 255 − 16·b. The table is computed by a function in `ste_lut.sv`. Its
contents are this design's choice.

**Gating.** After ND, `wu_gating` decides whether the layer updates its
weights in this time step:

```
en = ossl_en  AND  ī > i_thr  AND  ( H_PC < C_PC·ī  OR  H_CC < −C_CC·ī )
```

* ī is a running average of the number of input spikes per time step:
  `ī += (count − ī) >> ia_shift`.
* `i_thr` is a global threshold.
* C_PC and C_CC are per-layer gains /16, which make the thresholds follow the
  input activity.

The inputs of the comparison are those of the chip. The way the three
conditions are combined, with an OR between the two similarity conditions,
is this design's choice.

**Spike integration and weight update (SI/WU)** run together in the same
pass. For each word (weight w, post-neuron j) of an active presynaptic
row i:

```
u_j <- u_j + (w << w_shift)                    if neuron i spiked
w   <- sat8(w + Stoc(e_i · g_j >> lr_ossl))    if the layer's WU is enabled
```

The gradient of a synapse is the product of a presynaptic factor (the trace
e_i) and a postsynaptic factor (g_j). This factorisation is what makes DSST
cheap.

**Output layer.** It uses the same neuron dynamics. On the last step of a
sample it predicts the neuron with the most spikes (`pred_mode` 0) or the one
with the largest membrane potential (`pred_mode` 1). When a label comes with
the time step and `sl_en` is set, every output weight with an active
presynaptic trace moves by:

```
Stoc(e_i · (target_j − e_j) >> lr_sl),   target = 4.0 for the labelled neuron, else 0
```

A target of 4.0 is roughly the trace of a neuron that fires on most time
steps. The labelled neuron is therefore pushed to fire steadily, and the
others are pushed to stay silent.

This rule is this design's choice. The published description names the SL
engine but not its rule.

## One time step

`ctrl_fsm` sequences the core:

```
IDLE (clk_en = 0) --vector from the input buffer--> ND (all used layers, input traces, ī)
  -> GATE (each hidden layer latches its WU enable)
  -> SI/WU (all used layers in parallel)
  -> DSST (each hidden layer whose WU counter > X, if enabled) -> END (output packet) -> IDLE
```

Each phase issues one-cycle start pulses and waits for the done pulse of
every unit it started. All layers run SI/WU in the same phase. Each uses the
spikes that the layer below produced in ND of the same step, so consecutive
layers form a pipeline with one step of delay per layer. A hidden layer
counts the time steps in which its WU ran. When the count exceeds `dsst_x`,
the layer runs DSST and the count is cleared.

Typical cycle counts at full size, with `n_act = 16`:

| phase | cycles |
|---|---|
| ND | 128 |
| SI/WU of a hidden layer | 1 per silent presynaptic neuron + 16 per active one, so at most 8192 |
| SI/WU of the output layer | 512 |
| initialisation | 8192 |
| DSST scan | about G·D·n_act cycles |
| DSST regrow | n_act + 2 per pruned synapse |

## DSST: prune and regrow without sorting a dense gradient

A DSST pass (`dsst_engine`) runs five streaming TopK sorters (`topk_heap`)
at once:

* **one pruning sorter** reads every active weight&index word of the layer
  with key −|w|, and keeps the k = `prune_k` smallest weights together with
  their location (row, group, slot);
* **four gradient sorters** each read the 128 stored post-gradients of their
  group with key |g_j| and keep the `n_act` largest.

The gradient of synapse i→j is e_i·g_j. The best post-neurons of a group are
therefore the same for every presynaptic neuron, and sorting 4 × 128 values
replaces sorting 512 × 512. Each pruned slot (i, q, s) is then rewritten:

1. the other slots of row (i, q) are read;
2. candidates that row i already reaches are dropped;
3. the remaining candidate with the largest |g| is written into slot s with
   weight 0.

Pruning and regrowth are one index rewrite, and every row keeps its length.

Each sorter is a binary min-heap in registers. While fewer than k elements
have arrived, new ones are appended. At the k-th element the heap is built
by sifting down from node k/2−1. After that, an element larger than the root
replaces the root and is sifted down. The states are Idle, Proc, Swap and
Outp.

## Links, buffer and configuration

**Input link.** Spike packets arrive one bit at a time, LSB first, on
`in_req`/`in_data`/`in_ack` with a two-phase handshake: each toggle of
`in_req` carries one bit, and `in_ack` toggles back. `async_deser` collects
30 bits into a packet:

| bits | field |
|---|---|
| 8:0 | input channel |
| 10:9 | axonal delay in time steps |
| 11 | spike valid |
| 12 | end of time step |
| 13 | last step of a sample |
| 17:14 | label |
| 18 | label valid |

`st_buffer` holds four 512-bit slots. A spike with delay d sets its bit in
the slot d steps ahead. An end-of-time-step packet hands the current slot to
the core and advances the ring. While the core is still busy with the
previous vector, end-of-step packets wait, and the serial link stalls.

**Output link.** One 30-bit packet per time step goes out through
`async_ser` with the same protocol:

| bits | field |
|---|---|
| 15:0 | output spikes |
| 19:16 | prediction |
| 20 | prediction valid (last step of a sample) |

**SPI and registers.** SPI runs in mode 0. A frame is 24 bits:
`{write, addr[6:0], data[15:0]}`. A read frame returns the register on
`miso` during its data bits. Writing bit 15 of register 0 starts the
initialisation of all weights and states, which must be done before the
first time step.

| reg | field | reset |
|---|---|---|
| 0 | [0] ossl_en [1] dsst_en [2] sl_en [4:3] n_hidden [5] pred_mode [15] init | 0x0017 |
| 1 | n_act (1..16) | 16 |
| 2 | dsst_x: DSST after more than X WU steps | 4 |
| 3 | prune_k | 8 |
| 4 | i_thr | 0 |
| 5 | ia_shift | 2 |
| 6–9 | β of inputs, hidden 1, hidden 2, outputs (/256) | 224 |
| 10–12 | θ of hidden 1, hidden 2, outputs | 64 |
| 13–16 | C_PC1, C_PC2, C_CC1, C_CC2 (/16) | 16 |
| 17, 18 | lr_ossl, lr_sl (right shifts) | 6 |
| 19 | w_shift (SI left shift) | 0 |
| 20 | LFSR seed | — |

## How this RTL departs from the published chip

* **Serial links are clocked.** On the chip the deserializer and serializer
  are clockless Mousetrap latch pipelines, always on while the core clock is
  gated. Here they are synchronous and keep the protocol, the bit ring and
  the 30-bit packet. Their request and acknowledge inputs pass two-flop
  synchronizers, and a bit takes a few core clocks.
* **No clock gating.** The core's idle state is signalled on `clk_en` and no
  gating cell is instantiated.
* **Memories are register arrays** with combinational reads, not SRAM
  macros.
* **Slots per row (`N_MAX = 16`).** This value comes from the minimum
  sparsity published for four groups and 512-neuron layers (about 87.5 %).
  The chip's evaluated tasks were started at 80 % sparsity, which would need
  26 slots per row.
* **Choices where the chip is not specified:**
  - fixed-point formats;
  - STE table contents;
  - the combination of the gating conditions;
  - the SL rule;
  - packet fields and register map;
  - initial connectivity pattern and the value of regrown weights (0);
  - where the input traces are kept.
* **Recurrent connections** are not implemented. They are hinted at by the
  name of the second synapse memory but not described.

## Sizes and what fits

Everything is built at the published size: 512 inputs, 2 × 512 hidden
neurons, 16 outputs, and 4 PEs per layer. The stored synapses total
2 layers × 4 groups × 512 × 16 × 17 bits ≈ 1.1 Mbit. Neuron words are
2 × 512 × 72 bits.

The network can run tasks with up to 512 input channels and 16 classes at
any depth from 0 to 2 hidden layers. The sparsity must be 87.5 % or more
(`n_act ≤ 16`). Denser settings need a larger `N_MAX` in `elf_pkg.sv`. Row
addresses are `{row, slot}`, so a larger `N_MAX` must be a power of two.

## Files

| file | contents |
|---|---|
| `elf_pkg.sv` | sizes, structs (`syn_t`, `neu_t`, `pkt_t`, `cfg_t`), rounding and saturation helpers |
| `elfcore_top.sv` | the processor |
| `ctrl_fsm.sv` | time-step sequencer |
| `spi_slave.sv`, `param_bank.sv` | configuration |
| `async_deser.sv`, `st_buffer.sv`, `async_ser.sv` | links and the delay buffer |
| `adapt_thr.sv`, `input_trace.sv` | input activity, adaptive thresholds, input traces |
| `hidden_layer.sv` | one hidden layer: PEs, memories, OSSL, DSST |
| `nd_ss_logic.sv`, `ste_lut.sv`, `wu_gating.sv`, `si_wu_pe.sv` | the layer's datapaths |
| `neuron_sram.sv`, `syn_sram.sv` | memories |
| `topk_heap.sv`, `dsst_engine.sv` | sorting and prune/regrow |
| `output_layer.sv` | output neurons, prediction, SL |

Every module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=<n> failures=<n>` and stops itself after a fixed number of
cycles if the design hangs.

`tb_elfcore_top` runs the whole processor at its default size, driving it
only through its pins. It configures the core over SPI and streams spike
packets over the serial link. It runs samples with:

* two hidden layers;
* a gating threshold that blocks all weight updates;
* one hidden layer;
* no hidden layer with membrane-based prediction.

It receives the output packets with random stalls and checks:

* the input vectors against the delayed spikes sent;
* one packet per time step;
* the prediction against the spike counts in the received packets;
* that the gating and bypass rules hold.

It also counts, and requires, every mechanism: back-pressure on both links,
delayed spikes, WU on and off, zero skipping, DSST, SL, all bypass modes,
both prediction modes and idle periods.

`tb_workload_sl` checks that learning actually learns. It builds a small
synthetic task with four classes. Each class has its own 24 input channels,
and each channel fires with probability 1/2 on each of four time steps. A few
random noise spikes are added, and one silent step ends each sample. The
output layer reads the inputs directly. It trains on 96 labelled samples
through the pins and is then tested on 24 new samples with learning off. The
bench requires at least 80 % accuracy and currently reaches 24 of 24.

Because the output layer integrates a step's input one step later, a sample
needs that closing step. Without it, the lagged spike of the previous sample
lands in the next sample's count. A fast input trace (`beta_in` = 64) keeps
the previous class's channels from being credited to the next label.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Irtl rtl/elf_pkg.sv tb/tb_elfcore_top.sv \
          --top-module tb_elfcore_top -o sim --Mdir obj
./obj/sim
```

Replace `tb_elfcore_top` with any other testbench to run a single block. The
full-size top-level test takes about a second, the workload test a few. The other testbenches take
less.
