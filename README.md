# An echo state network core with on-chip readout training

This is synthesizable SystemVerilog for a small neuromorphic core that classifies
streams of sensor data (for example a chest accelerometer for activity recognition,
or EMG channels for finger-movement recognition) with an echo state network (ESN).
It is an implementation of the architecture described in *Reservoir Network with
Structural Plasticity for Human Activity Recognition* (Zyarah, Abdul-Hadi,
Kudithipudi, IEEE TETCI 2023). It is not the authors' code. Where the paper leaves a
detail open, the choice made here is stated below and in the header comment of the
file concerned.

An ESN has three layers. The **reservoir** is a large, sparsely and randomly
connected recurrent layer whose weights are never trained. It turns a short input
vector into a high-dimensional state that also remembers the recent past. The
**readout** is a single trained linear layer (with a sigmoid) on that state. Two ideas
make this cheap in hardware:

* No reservoir weight is stored. Every reservoir neuron regenerates its input
  weights, recurrent weights and recurrent connection pattern from its own LFSRs.
  The LFSRs are reseeded at every time step, so the "random matrix" is the same at
  every step. The spectral-radius normalisation that an ESN needs (the echo state
  property) becomes a fixed right shift of the recurrent weights.
* Only the readout learns, with plain stochastic gradient descent (SGD). The
  learning rate is a power of two, applied as a shift. Each output neuron keeps its
  own 128x24 weight SRAM and updates it in place after every training sample.

The default size is the one evaluated in the paper: 4 inputs, 128 reservoir
neurons, 4 outputs (a "4x128x4" network), clocked at 50 MHz. Each reservoir neuron circuit can
also run a second, virtual neuron, so the reservoir can be grown at run time from
128 up to 256 neurons without more weight memory.

## Block structure

```
 microcontroller ──cfg / sample handshake──► ccu ──controls──┐
        │ features (SQ3.12)                                   │
        ▼                                                     ▼
   htree[0] ──► reservoir_neuron x64 (cluster 0) ─┐        shifter x2 ──4 links──► readout_sparsity gate
   htree[1] ──► reservoir_neuron x64 (cluster 1) ─┴─x[2x128]─► (one group of 4)           │
                                                                                       ▼
                                            readout_neuron 0 ► 1 ► 2 ► 3 ► (back to 0)   ring
                                            (each: weight_sram 128x24, sgd_update, sigmoid_pwl)
```

| module | role |
|---|---|
| `esn_top` | wires the core together; parameters `N_I`, `N_R`, `N_O`, `N_COL`, `N_TREE`, `TREE_PIPE`, `N_VIRT` |
| `ccu` | central control unit: hyperparameter registers, sample handshake, phase sequencing |
| `htree` | one broadcast tree per reservoir cluster; carries input features and feedback activations |
| `reservoir_neuron` | leaky-integrated neuron circuit with three LFSRs, one accumulator, tanh, leak; serves a physical and a virtual neuron |
| `tanh_pwl` | piece-wise linear tanh, bit-sliced as in the paper's figure |
| `shifter` | puts one group of 4 reservoir neurons at a time onto the 4 readout links (one shifter per slot) |
| `readout_sparsity` | optional random rejection of reservoir activations entering the readout; picks physical or virtual neuron per link |
| `readout_neuron` | MAC, sigmoid, SGD training block and weight SRAM of one output |
| `sgd_update`, `sigmoid_pwl`, `weight_sram`, `lfsr` | pieces of the above |
| `esn_pkg` | number formats, types, configuration map, seed function |

## Number formats

All values are two's complement fixed point. SQm.n means a sign bit, m integer bits
and n fraction bits.

| quantity | width | format | origin |
|---|---|---|---|
| input feature u | 16 | SQ3.12 | paper |
| reservoir random weight (LFSR word) | 16 | SQ0.15 | paper gives "MSB is the sign"; scale chosen here |
| reservoir accumulator | 24 | SQ8.15 | width from paper, scale chosen here |
| reservoir activation x | 16 | SQ1.14 | follows from the tanh bit slicing |
| leak rate delta, 1-delta | 16 | unsigned Q1.15 | chosen here |
| readout weight | 24 | SQ3.21 | paper |
| readout accumulator | 32 | SQ10.21 | width from paper, scale chosen here |
| readout output yhat, label y | 16 | SQ1.14 | chosen here (1.0 = `16'h4000`) |

The activation format is forced by the tanh. The paper's tanh circuit looks at the
24-bit accumulator z as a sign bit (23), eight range bits (22..15) and low bits.
It outputs +1 when z is positive and any range bit is set. It outputs -1 when z is
negative and the range bits are not all ones. Otherwise it outputs
`{z[23], z[15:1]}`. This matches the clamp `tanh(z) = z for |z| < 1` only when z has
15 fraction bits. The output then has 14 fraction bits. The two products feeding the
accumulator are aligned to that scale:
u·W_ri is shifted right by 12, and x·W_r by 14.

## The reservoir neuron and its connections

One time step of a reservoir neuron computes

```
acc   = Σ_i u_i · W_ri[i]  +  Σ_{j ∈ sources} x_j(t-1) · (W_r[j] >>> esp_shift)
xhat  = tanh(acc)
x(t)  = delta · xhat + (1 - delta) · x(t-1)
```

The neuron sees one 16-bit word per cycle on its H-tree. An input word is
multiplied by the current word of **LFSR-FF**, which then advances.

Feedback is the hardest part of the design. The CCU sweeps the neuron indices of
a cluster: in cycle k, neuron k puts its previous activation on the tree together
with its index (`Neuron_ID`). Each neuron holds `S_ID`, the index of the next neuron
it listens to. When `Neuron_ID == S_ID`:

* the word is multiplied by the current word of **LFSR-FB**, shifted right by
  `esp_shift`, and accumulated;
* LFSR-FB advances;
* **LFSR-S** advances, and `S_ID` moves forward by `1 + (LFSR-S & (2^gap_bits - 1))`.

So each neuron draws its own random, ascending list of sources. The mean gap is about
2^(gap_bits-1). With the reset value `gap_bits = 4`, a neuron has on average 7 to 8
recurrent inputs out of 64, about 6 % of the reservoir. The paper asks for less than
10 %. The paper gives the comparator, the LFSR-S name and the purpose.
The ascending-gap rule is this implementation's own choice.

At `start` (every time step) all three LFSRs are reloaded from seeds fixed per
neuron (`esn_pkg::seed_hash(index, salt)`), so W_ri, W_r and the connection
pattern never change. `update` applies tanh and the leak. A neuron whose index is
not below the reservoir-size register (`nr_active`) holds x = 0. This is how the
reservoir is shrunk at run time; growing it past 128 uses virtual neurons (next
section).

The paper's echo-state-property argument is that, with LFSR weights, the spectral
radius depends almost only on the sparsity. So one right shift, picked according to
the sparsity, normalises the recurrent matrix. Here that shift is the `esp_shift`
register. Which shift suits which `gap_bits` is left to whoever configures the core.

## Growing the reservoir: virtual neurons

The reservoir can hold more neurons than there are neuron circuits. Each
`reservoir_neuron` circuit serves two neurons by time multiplexing: slot 0 is the
physical neuron n, and slot 1 is a virtual neuron with index 128 + n. The size
register `nr_active` runs from 0 to 256, so the reservoir grows one neuron at a
time. While `nr_active` is at most 128, slot 1 is off and nothing changes in the
schedule.

Above 128, one time step has two rounds:

1. Round 0 computes slot 0. The LFSRs are loaded with slot 0's seeds, the inputs
   are broadcast, and the feedback sweep covers **both** slots of the cluster (128
   sources per tree; the source index carries the slot in its top bit). The new
   value is parked in the circuit's **Temp** register.
2. Round 1 does the same for slot 1, with its own seeds (salts 5 to 7 instead of 1
   to 3). Its update **commits**: both slots take their new value in the same
   cycle.

The commit is why Temp is needed. During round 1 the tree still broadcasts the old
x(t-1) of slot 0. Writing slot 0's new value straight away would mix two time steps.

The readout still has 128 weights per output. With virtual neurons active, each
weight is connected to only one of the two neurons of circuit n. Bits 4 to 7 of the
readout sparsity LFSR word (the same word whose bits 0 to 3 gate the links) choose
the slot for each link. There are two shifters, one per slot, and a multiplexer per
link picks between them. So the readout switches to a sparse connection pattern
instead of growing its memory. The reservoir gets larger, but each output still
reads 128 of the 256 activations.

The cost is time. At 256 neurons the latency rises from 237 to 436 cycles. Both
rounds sweep twice as many sources, and round 0 adds a START/INPUT/DRAIN/UPDATE
sequence of its own.

## Data movement

**Input and feedback (H-trees).** The reservoir is split into `N_TREE` = 2 clusters
of 64 neurons. Each cluster has its own `htree`. All trees receive the same input
features. Each tree carries its own cluster's feedback activations, and all trees do
so in the same 64 cycles. As a result, recurrent connections stay inside a cluster.
At the tree root, a single comparator checks the activation being broadcast. If
|x| < `sig_thr`, it sends the word as zero. This is the paper's "broadcast only
activations with significant impact" with one shared evaluation circuit. Here the
slot is still spent: this saves switching, not cycles. Each tree has `TREE_PIPE`
register stages (default 1).

**Reservoir to readout (shifter and ring).** The 128 neurons form 32 groups of 4:
neuron `g*4 + c` is in group g, column c. (The paper calls such a group a column of
the array.) The shifter connects one group at a time
to 4 dedicated links, and link c feeds output neuron c. The output neurons form a
ring. For each group the readout spends one cycle loading the 4 activations and 4
cycles computing. In each compute cycle, every output neuron uses the activation it
holds and then passes it to the next neuron in the ring. After s rotations, output
neuron o holds the activation of column `(o - s) mod 4`. It therefore reads weight
address `g*4 + (o - s) mod 4`. After 4 compute cycles every output neuron has seen
all 4 activations of the group.

**Readout sparsity.** In sparse mode (`en_sp`), output neuron c accepts the
activation on link c only when bit c of a sparsity LFSR and the CCU's SP bit are
both 1. A rejected activation enters the ring as zero. It then contributes nothing,
and its weights are left alone. The sparsity LFSR is reseeded at the start of every
readout pass, so the pattern is the same in every pass and every time step. SP is
an 8-bit pattern, rotated one position per group, and its density sets the sparsity
level. The same LFSR word also picks physical or virtual neuron per link when the
reservoir is larger than 128 (see above).

## Readout and training

Each output neuron accumulates `x · W >>> 14` into a 32-bit accumulator. It then
applies the piece-wise sigmoid: 1 above 2, 0 below -2, `z/4 + 0.5` in between. In
training mode a second pass over the same 128 activations writes back

```
W ← saturate24( W - (((yhat - y) · x) >>> 7 >>> lr_shift) )
```

This is eq. 7 of the paper with batch size 1. The learning rate is 2^-lr_shift.
The weight SRAM has one synchronous read port and one synchronous write port. The
weight for the next activation is read in the same cycle as the previous one is
written back. After reset, the CCU spends 128 cycles filling every SRAM from that
output neuron's 24-bit LFSR. The LFSR word is shifted right by 4, which gives
initial weights within about ±0.5.

## Control, timing and throughput

The `ccu` holds the configuration registers and runs two state machines that
cooperate, so that the readout of one time step overlaps the data movement of the
next.

**Reservoir sequencer.** INIT fills the readout SRAMs once after reset (128
cycles). Then, per sample: IDLE (`in_ready` high) takes the sample; START reseeds
the reservoir LFSRs and clears the accumulators; INPUT puts the 4 features on every
H-tree (4 cycles); FEEDBACK sweeps the 64 neuron indices of each cluster (64
cycles); DRAIN waits for the tree pipeline (`TREE_PIPE`); WAIT holds until the
readout sequencer is idle; UPDATE applies tanh and the leaky integration to every
neuron in one cycle and hands the sample's labels and train flag to the readout
sequencer.

**Readout sequencer.** A forward pass over the 32 groups (one load cycle and 4
multiply-accumulate cycles each, 160 cycles), the sigmoid, `out_valid`, and for a
training sample a second, identical pass that writes back the updated weights.

**Why the overlap is safe.** Both readout passes only read the activations x(t),
and the reservoir sequencer only reads them during INPUT and FEEDBACK (as x(t-1) for
the next step). The activations change only in UPDATE, and UPDATE waits in WAIT
until the readout has finished. The H-trees are not needed by the readout, because
each column has its own link to an output neuron. So sample t+1 is taken and
broadcast while the readout of sample t is still running.

| | cycles | at 50 MHz |
|---|---|---|
| latency, handshake to `out_valid`, readout idle | 3 + N_I + N_R/N_TREE + TREE_PIPE + 1 + N_R/N_COL·(N_O+1) + 3 + 1 = **237** | 4.74 µs |
| streamed training samples | N_R/N_COL·(N_O+1)·2 + 9 = **329** per sample | 152 k samples/s |
| streamed test samples | N_R/N_COL·(N_O+1) + 6 = **166** per sample | 301 k samples/s |
| latency with virtual neurons (`nr_active` > 128) | the above + 2 + N_I + TREE_PIPE + 3·N_R/N_TREE = **436** | 8.72 µs |

All four numbers are checked in the end-to-end testbench. With the default size,
the readout (one pass = 160 cycles) is the bottleneck. The reservoir phase (about 75
cycles) is hidden behind it.

**Smaller reservoirs run faster.** The paper observes that a larger reservoir
lowers the throughput. Here, with `nr_active` = n ≤ 128, the schedule shrinks with
n. The feedback sweep stops after min(n, 64) sources, and the readout visits only
the ceil(n/4) groups that hold active neurons (at least one of each). The disabled
neurons are always the highest indices, and every neuron takes its sources in
ascending order, so skipping them changes no result. The formulas above then use
min(n, 64) for N_R/N_TREE and ceil(n/4) for N_R/N_COL. For example, at 32 neurons
the latency is 3 + 4 + 32 + 1 + 1 + 8·5 + 3 + 1 = 85 cycles, and streamed test
samples come every 8·5 + 6 = 46 cycles instead of 166. Both testbenches check this.
With virtual neurons the full schedule is always used.

The paper reports 0.06 M samples/s and a 17.36 µs latency for its chip. Its
feedback movement costs about one broadcast per recurrent connection (n_r²/(σκ)
cycles). This design needs one broadcast per neuron per tree. Both rates are far
above the 52 Hz (activity data) and 4 kHz (EMG data) sample rates of the target
applications.

### Microcontroller interface

Samples use a ready/valid handshake. `in_ready` is high while the reservoir
sequencer is idle, which can be while the readout of the previous sample is still
running.
The 4 features, the 4 labels and `in_train` are latched with `in_valid`.
`out_yhat` is valid while `out_valid` pulses, and stays stable until the next
sample. Configuration registers are written with `cfg_we`, `cfg_addr` and
`cfg_data`. A write is taken only while `cfg_ready` is high, which means both
sequencers are idle. A write at any other time is ignored.

After reset the core spends 128 cycles initialising the readout weights
(`init_done` rises), then sleeps: it takes configuration writes but no samples
(`in_ready` stays low) until the microcontroller sets the run bit. This is the
setup phase, in which the hyperparameters are chosen. Clearing the run bit puts the
core back to sleep between samples. Sleep here only stops the sequencers; gating
clocks is left to the physical implementation.

| `cfg_addr` | field | reset |
|---|---|---|
| 0 | `delta`, Q1.15, clipped to 1.0 | 0.5 |
| 1 | `lr_shift` (learning rate 2^-n) | 4 |
| 2 | `gap_bits` (reservoir sparsity) | 4 |
| 3 | `esp_shift` (W_r right shift) | 1 |
| 4 | `sig_thr` (feedback significance threshold) | 0 |
| 5 | `nr_active` (reservoir size, 0..256, clipped) | 128 |
| 6 | bit 15 `en_sp`, bits 7..0 SP pattern | dense, `8'hFF` |
| 7 | bit 0: run (0 = sleep) | 0 |

The paper's external microcontroller tunes these values with particle-swarm
optimisation. It also samples the sensors. Both jobs belong outside this core.

## Where this differs from the paper, and what is left out

* **Input filters.** The optional third-order LPF/HPF FIR stage of the paper is not
  included. The paper gives no coefficients, and its hardware results use
  unfiltered inputs.
* **Output feedback.** The optional W_f·yhat(t-1) term of the ESN equation is not
  built. The paper adds it only for pattern generation.
* **Virtual neurons.** The paper describes neurogenesis through time sharing, a
  temporary register, new seeds and a sparse readout. It does not give the number
  of neurons per circuit, the schedule, or how the readout pairs its weights with
  the extra neurons. Two neurons per circuit, the two-round schedule and the
  one-weight-per-circuit pairing are this design's choices.
* **Phase pipelining.** The paper says the MH-Tree lets phases be pipelined, but
  gives no schedule. The two-sequencer overlap above is this design's version, and
  so is the shorter schedule for smaller reservoirs.
* **Connection rule, formats, register map, handshake, LFSR polynomials and
  seeds** are this design's choices. The polynomials are x^16+x^14+x^13+x^11+1 and
  x^24+x^23+x^22+x^17+1.
* **Clusters.** With 2 H-trees, a neuron's recurrent inputs come only from its own
  half of the reservoir. This is one reading of the multiple-H-tree topology.
* Overflows wrap in both accumulators. Readout weights saturate at the 24-bit range.

Reading this RTL will not reproduce the paper's accuracy figures (95.95 % on activity
recognition, 85.24 % on finger control). Its random matrices and connection rule
differ from the authors', and it has not been run on those datasets.

## Simulation

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_esn_top \
    -y rtl -y tb +libext+.sv rtl/esn_pkg.sv tb/tb_esn_top.sv -o sim
./obj_dir/sim
```

Replace `tb_esn_top` with any other testbench name. `tb_esn_top` runs the full
default-size core at 50 MHz on a generated activity-like stream: 4 classes, each a
three-axis signal with its own offsets, oscillation and noise, plus a constant
fourth feature. It trains on 160 samples and tests on 40. It then switches on the
significance threshold, sparse readout, a 100-neuron reservoir, a sparser reservoir
and other leak and shift settings, and then grows the reservoir to 200 and 256
neurons with virtual neurons. After every sample it compares every output and every
one of the 256 activation slots with a behavioural model inside the testbench, and
at the end it compares all 512 weights. It also checks the latency (also at reduced sizes), the streaming
intervals (also at 32 neurons), that the broadcasts of one sample really overlap the readout of the
previous one, that training lowers the error, and that each mechanism actually
occurred. It runs in about 20
seconds. The unit testbenches check each block against arithmetic written
independently of it: the LFSR against its polynomial and period, tanh and sigmoid
against their equations, SGD against 64-bit integer arithmetic, the controller's
schedule against the latency formula, and so on.

`tb_esn_workloads` runs the default core at reservoir sizes 32, 64, 96, 128, 192
and 256 (through `nr_active`) on the generated activity-like stream, training on 200
samples and testing on 40. Test accuracy was 39, 39, 39, 40, 39 and 40 out of 40,
and the test latency 85, 157, 197, 237, 436 and 436 cycles.
This data is too easy to show a benefit from size. At 128 neurons it also tests with noise added
to the test inputs only: uniform noise of ±0.3 gave 39 of 40, Gaussian noise with
standard deviation 0.2 gave 35 of 40. It also runs a
generated two-channel EMG-like stream, whose classes differ only in the amplitude of
a rectified oscillation. That stream is learned only a little above chance (12 of
40 correct; chance is 10), so only the drop in training error is checked there.
These numbers describe the generated data, not the paper's datasets.

To change the network size, override the parameters of `esn_top`. `N_COL` must
equal `N_O`, and `N_R` must be a multiple of both `N_COL` and `N_TREE`. The
source-index width follows `N_VIRT·N_R/N_TREE`. `N_VIRT` may be 1 (no virtual
neurons) or 2. The reservoir-size register is 9 bits wide, so `N_VIRT·N_R` must
stay below 512 unless `NRW` in the `ccu` and the `nr_active` field in `esn_pkg`
are widened.
