# MF-RMF-NN: a hardware qubit-state discriminator for multiplexed readout

Superconducting qubits are read out by sending a microwave tone to a resonator.
The qubit's state shifts the phase of the tone that comes back. Several qubits
usually share one feedline, each with its own resonator frequency, so one pair of
ADCs (I and Q) digitises the sum of all their tones. The readout electronics must
turn about a microsecond of these samples into one bit per qubit, quickly enough
to feed back into the running program.

A large neural network fed with the raw ADC samples classifies well, but it is far
too big for the FPGA that sits next to the ADCs. The design here shrinks the
problem before the network sees it. Each qubit's trace is reduced to **two numbers**:

* a **matched filter (MF)**, a weighted sum over time that separates ground from
  excited traces;
* a **relaxation matched filter (RMF)**, a second weighted sum, trained to
  separate ground traces from traces in which the qubit decayed from 1 to 0 while
  it was being measured.

The 2N numbers of an N-qubit group go into a small feed-forward network
(10-10-20-32 for five qubits). The network undoes crosstalk between qubits and
uses the relaxation feature to recover the state the qubit had *before* the
measurement. The architecture comes from Maurya et al., "Scaling Qubit Readout
with Hardware Efficient Machine Learning Architectures" (HERQULES). The paper
describes it at block-diagram level and evaluates it in software and with HLS
estimates. This repository gives synthesizable SystemVerilog for the inference
path of one five-qubit group. All word widths, handshakes and the configuration
map are choices made here; they are listed at the end.

## Signal path

```
 ADC I/Q ─► data_buffer ─► demodulator q=0..4 ─┬─► matched_filter (MF,  q) ─┐
 (500 MS/s,  FIFO, 512    (NCO mix, 25-sample  └─► matched_filter (RMF, q) ─┤
  first flag)  samples)    average = 50 ns bin)                              ▼
                                                          fnn_small 10-10-20-32
                                                                │ argmax
                                                                ▼
                                                   state[4:0], one bit per qubit
```

| quantity | default | origin |
|---|---|---|
| qubits per group `N_QUBITS` | 5 | paper |
| ADC rate | 500 MS/s, at most one sample per clock | paper (rate); one sample per clock is a choice here |
| readout length | 1 µs = 500 samples | paper |
| bin | 50 ns = 25 samples (`SAMPLES_PER_BIN`) | paper |
| bins per trace `N_BINS` | 20 | follows from the two above |
| network | 10 → 10 → 20 → 32 | paper |
| reuse factor | 4 | paper (the configuration whose FPGA cost it reports) |

The whole group shares one clock. A trace is framed by the `first` bit, which
the ADC side sets on the first sample of each shot. Everything downstream
restarts on that bit.

## Demodulation (`demodulator.sv`)

There is one demodulator per qubit. Each one takes the full multiplexed stream
and multiplies it by the complex conjugate of its own intermediate-frequency
oscillator:

```
di = i·cos φ + q·sin φ         dq = q·cos φ − i·sin φ
```

Then it averages 25 consecutive products into one 50 ns bin. After mixing, the
qubit's own tone is a constant `A·e^{jθ}`. Here θ carries the state. The other
qubits' tones become oscillations, and the 50 ns average largely removes them.
The oscillator is a numerically controlled oscillator: a 24-bit phase
accumulator with a per-qubit step, whose top 8 bits address a 256-entry
`{sin, cos}` table in Q1.15. The step and the table are written through the
configuration port, so any waveform or frequency can be loaded. The phase
restarts at the first sample of a trace.

A bin value is `((Σ products) >>> 15) / 25`, truncated toward zero and
saturated to 16 bits. The bin comes out one cycle after its 25th sample.

## Matched filter and relaxation matched filter (`matched_filter.sv`)

This is the core of the design. One module serves both filters; only the
loaded envelope differs. For qubit *q* and a readout of `duration` bins it
computes

```
y = Σ_{t < duration}  env_i[t]·tr_i[t] + env_q[t]·tr_q[t]
```

with one multiply-accumulate step per bin as the bins arrive. No trace is stored.

**What the envelopes are.** Both envelopes are trained offline and written
through the configuration port. For per-bin vectors of the two classes, the
weight is `mean(Tr_a − Tr_b) / var(Tr_a − Tr_b)`, computed separately for I and
for Q:

* MF: `a` = ground traces, `b` = excited traces. The output is large when the
  trace looks like ground.
* RMF: `a` = relaxation traces, `b` = ground traces. Relaxation traces are not
  prepared on purpose; they are found inside the "prepared 1" training set. A
  trace labelled 1 whose time-averaged I/Q point lies closer to the ground
  centroid than half the distance between the two centroids is taken as a
  relaxation.

**Why the second filter helps.** A qubit that decays late in the readout gives
a trace that is "excited" at first and "ground" afterwards. The MF sums over the
whole window, so it may score that trace as ground. The RMF puts its weight
where relaxation traces differ from true ground traces, usually the early bins.
The network sees both numbers and can decide that the qubit was in 1 when the
measurement started. The end-to-end testbench builds exactly this case. Qubits
relax between bins 8 and 14, and the shots where the MF alone points to 0 but
the network outputs 1 are counted.

**Shortened readout.** Each qubit has a duration register (`CFG_DURATION`,
1–20 bins, 20 after reset), shared by its MF and RMF. Only the first `duration`
bins are accumulated. The result is ready one cycle after bin `duration−1`, and
later bins are accepted and ignored. Filters and network trained on the full
1 µs window can therefore be run on 750 ns or 500 ns windows without
retraining. One qubit can also be read faster than the others; the network
then starts as soon as the slowest filter has finished.

**Output scaling.** The 40-bit accumulator is shifted right by `OUT_SHIFT = 15`
and saturated to 16 bits, which is the network's input format. Training must
account for that scale.

**Hand-off.** The result is held until the network takes it. Until then the
filter refuses the first bin of the next trace, which stalls the demodulator
(see Flow control).

## The network (`fnn_small.sv`, `fnn_dense.sv`)

The input vector is `[MF q1..q5, RMF q1..q5]`. There are two hidden layers of 10
and 20 ReLU neurons and an output layer of 32 logits, one per basis state. The
network was trained with a softmax / cross-entropy objective, and softmax does
not change which logit is largest. The hardware therefore returns the index of
the largest logit (the lowest index on ties) and its value. Bit *q* of the
index is the state of qubit *q+1*.

**Reuse factor.** Each layer is an `fnn_dense` instance. Each neuron owns
`LANES = ceil(IN/REUSE)` multipliers and walks its inputs in
`STEPS = ceil(IN/LANES)` cycles, so a layer holds about `IN·OUT/REUSE`
multipliers. With `REUSE = 4` all three layers take 4 cycles.
`REUSE = 64` leaves one multiplier per neuron.

**Latency.** Counted from the input handshake to `out_valid`, it is 1 (capture)
+ 4 + 4 + 4 (layers) + 1 (argmax) = **14 cycles** at reuse factor 4, and 42 at
reuse factor 64. The paper's HLS builds report 8 and 21 cycles. The difference
comes from the schedule: here the layers run strictly one after another, and no
layer starts on partial results.

**Numbers.** Activations, weights and biases are signed Q8.8 (16 bits).
Accumulation uses 40 bits. Each layer output is shifted right by 8 and
saturated (and clamped at zero for ReLU). Weight `w[n][i]` of a layer with IN
inputs sits at configuration offset `n·(IN+1)+i`; offset `n·(IN+1)+IN` holds
neuron n's bias.

## Flow control and timing (`herqules_top.sv`, `data_buffer.sv`)

The ADC cannot be stalled, but everything after it can:

* The network accepts the ten filter results only when it is idle and its
  previous state has been taken (`state_ready`).
* A filter with an untaken result refuses the next trace's first bin.
* A demodulator whose finished bin is not taken stops taking samples.
* All five demodulators take a sample together, so the buffer releases a
  sample only when every demodulator can take it.
* The buffer (512 samples, one whole trace) absorbs the stall. When it is full,
  incoming samples are dropped, and `overflow` (sticky) and `drop_count` record
  it. `clear_ovf` clears both. A trace damaged this way resynchronises at the
  next `first` sample.

When nothing stalls, `state_valid` rises **17 cycles** after the clock edge that
writes the last sample of the integrated window into the buffer. That is 1
cycle in the buffer, 1 in the demodulator, 1 in the filter and 14 in the
network. At the default sizes a shot of 500 samples takes 500 cycles to arrive,
so the discriminator keeps up with back-to-back shots.

## Configuration port

`cfg` is a `cfg_wr_t` struct: `we`, a 4-bit `region`, a 12-bit `offset` and
32-bit `data`. One word is written per cycle. All trained values must be
loaded before the first shot.

| region | offset | data |
|---|---|---|
| `CFG_LO_FREQ` (0) | qubit | phase step, 24 bits (f_IF / f_sample · 2^24) |
| `CFG_LO_TABLE` (1) | qubit·256 + index | `{sin, cos}` Q1.15 |
| `CFG_MF_ENV` (2) | qubit·32 + bin | `{env_q, env_i}` signed 16-bit |
| `CFG_RMF_ENV` (3) | qubit·32 + bin | `{env_q, env_i}` signed 16-bit |
| `CFG_DURATION` (4) | qubit | bins to integrate, 1..20 (0 reads as 1, >20 as 20) |
| `CFG_FNN_L1..L3` (5..7) | n·(IN+1) + i | weight or bias, Q8.8 |

## How far this follows the paper

Taken from the paper:

* the chain ADC → buffer → demodulation → per-qubit MF and RMF → network;
* demodulation by mixing with a resonator-specific oscillator and averaging
  over 50 ns;
* the filter as a MAC dot product of I and Q envelopes, summed into one number;
* two filters per qubit and their training rules;
* the 10-10-20-32 network with softmax output;
* the meaning of the reuse factor;
* shortened readout, for all qubits or for some, without retraining;
* the five-qubit, 500 MS/s, 1 µs, 50 ns numbers.

Choices made here, where the paper is silent:

* All bit widths and fixed-point formats.
* The NCO with a loadable table.
* One demodulator per qubit. The paper draws a single demodulation block.
* Bins are filtered as they stream. The paper's figure draws per-qubit trace
  stores; here no trace is kept.
* ReLU in the hidden layers.
* Argmax instead of softmax.
* The class-bit convention.
* The valid/ready handshakes and the buffer's depth and overflow policy.
* The configuration map.
* Synchronous active-low reset.

Known departures:

* Network latency is 14 cycles at reuse factor 4 instead of the paper's 8, and
  42 instead of 21 at reuse factor 64 (see The network).
* FPGA utilisation (the paper reports 7.79 % of a Zynq UltraScale+ xczu7ev's
  LUTs) has not been measured for this RTL.
* Readout accuracy has not been reproduced. The experimental dataset is not
  part of this work, and the testbenches use synthetic signals with hand-set
  weights.
* Not included: the ADCs; the offline training (envelope estimation,
  relaxation labelling, network training); and the MF-NN variant without RMFs,
  which the paper only uses for comparison. Setting the RMF envelopes and their
  network weights to zero gives that variant's behaviour.

## Simulating

Every file holds one module or package. `rtl/herq_pkg.sv` must be read first.
The testbenches are self-checking and end with
`TB_RESULT checks=N failures=M`. They were run with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_herqules_top \
  -y rtl -y tb +libext+.sv rtl/herq_pkg.sv tb/tb_herqules_top.sv
./obj_dir/Vtb_herqules_top
```

| testbench | what it establishes |
|---|---|
| `tb_data_buffer` | FIFO order against a reference queue under random traffic, 1-cycle latency, overflow drop count and clear |
| `tb_demodulator` | bins bit-exact against an integer reference; recovers a tone's amplitude and phase next to another tone and noise; ignores other qubits' writes; random output stalls lose nothing |
| `tb_matched_filter` | envelope trained by the mean/var rule; results bit-exact; ground above excited; 15- and 10-bin durations with result one cycle after the last integrated bin; next trace held while a result waits |
| `tb_relaxation_filter` | RMF envelope trained from synthetic relaxation traces; results bit-exact; relaxation traces score above ground |
| `tb_fnn_small` | 200 random inputs through random weights, bit-exact against an integer model at reuse factors 4 and 64; latencies 14 and 42; input refused while a result waits |
| `tb_herqules_top` | the whole group at default sizes: all 32 basis states decoded, late relaxations decoded as 1 with RMF corrections counted, 17-cycle latency, 750 ns and per-qubit 500 ns readout, stall back to the buffer, overflow and recovery |

The end-to-end test runs at the design's default parameters and takes well
under a second.

To change the group size, set `NQ` on `herqules_top`. The network becomes
2N → 2N → 4N → 2^N. The package constants give the defaults for the block-level
modules. `NB`, `SPB` and `BUF_DEPTH` set the trace length, the bin width and the
buffer depth. `REUSE` trades multipliers for latency.
