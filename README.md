# Real-time three-level readout of frequency-multiplexed transmons

Superconducting qubits are not really two-level systems. Now and then a
transmon leaks out of {|0>, |1>} into |2> or higher, and a leaked qubit
corrupts the gates around it. To catch leakage in time, the readout
electronics must tell three states apart (0, 1 and "leaked") on every
measurement, for every qubit, within a few nanoseconds of the end of the
readout pulse.

This RTL implements the discriminator proposed in *Efficient and Scalable
Architectures for Multi-Level Superconducting Qubit Readout* (Mude, Maurya,
Lienhard, Tannu). The main idea is this. A network that maps a whole readout
trace to one of the 3^n joint states grows exponentially with the number of
qubits n. Instead, the design reduces each qubit's trace to a few
matched-filter scores. It then runs one small network per qubit on the scores
of all qubits. Each network has only three outputs, so the model grows
polynomially in qubits and levels. The filters capture more than the state
centroids: some are tuned to traces where the qubit relaxed or was excited
during the measurement. The networks that see all qubits' scores correct
crosstalk between neighbouring resonators.

The default configuration is the one the paper evaluates. It has 5 qubits on
one feedline and 3 levels. A trace is 1 us of ADC data at 500 MS/s, which is
500 I/Q samples. Each qubit has 9 filters, and each network is 45-22-11-3.

## Signal chain

```
                  +-------------+   +---------------------+
 adc_i/adc_q ---->| demodulator |-->| 9 matched filters   |--+ 9 scores
 (one feedline,   |  qubit 0    |   | QMF x3 RMF x3 EMF x3|  |
  all qubits)  |  +-------------+   +---------------------+  |
               |        ...  (one pair per qubit)   ...      |     +---------+
               |  +-------------+   +---------------------+  +---->| feature |-- 45 --+--> FNN 0 --> state 0
               +->| demodulator |-->| 9 matched filters   |------->|  merge  |        +--> FNN 1 --> state 1
                  |  qubit 4    |   |                     |        +---------+        |    ...
                  +-------------+   +---------------------+                           +--> FNN 4 --> state 4
```

| Module | Role |
|---|---|
| `iq_demodulator` | Shifts the shared feedline stream down to one qubit's baseband |
| `matched_filter` | Dot product of one demodulated trace with one stored I/Q envelope |
| `mf_bank` | Nine filters of one qubit and the sequencer that frames the trace |
| `feature_merge` | Waits for all qubits' scores and forms the 45-entry vector |
| `dense_layer` | One fully connected layer (helper of `qudit_fnn`) |
| `qudit_fnn` | Per-qubit 45-22-11-3 network, weight store and argmax |
| `qudit_readout_top` | All of the above plus the configuration decode |
| `readout_pkg` | Sizes, number formats, enums and the configuration struct |

## The nine matched filters of a qubit

A matched filter is a per-sample weighting of the trace. The score of a trace
x(t) = I(t) + jQ(t) under envelope K is

    score = ( sum_t K_I[t]*I[t] + K_Q[t]*Q[t] ) >>> MF_SHIFT        (saturated to 16 bits)

For two classes of traces with per-sample means mu_a, mu_b and variances
sigma_a^2, sigma_b^2, the envelope is

    K[t] = (mu_b[t] - mu_a[t]) / (sigma_b^2[t] - sigma_a^2[t])

It is computed offline from labelled traces, quantised to 16 bits and loaded
into the filter. The hardware does not care what a filter was trained for.
The order of the nine slots (`readout_pkg::mf_index_e`) fixes the meaning the
networks were trained with:

| Slot | Name | Classes it separates |
|---|---|---|
| 0-2 | QMF_01, QMF_02, QMF_12 | state pairs |0>/|1>, |0>/|2>, |1>/|2> |
| 3-5 | RMF_10, RMF_20, RMF_21 | relaxation during readout: 1->0, 2->0, 2->1 |
| 6-8 | EMF_01, EMF_02, EMF_12 | excitation during readout: 0->1, 0->2, 1->2 |

The relaxation and excitation filters come from traces labelled offline. A
trace that was prepared in one state but averages out nearer another state's
centroid counts as an error trace. Leaked (|2>) training traces also come
from offline work. Spectral clustering of the mean trace values finds the
rare natural leakage events in ordinary two-level calibration data, so no
explicit |2> preparation is needed. None of this training is in the RTL; it
only produces the envelope and weight words that the configuration bus
loads.

**Shortened readout.** `trace_len` sets how many samples a filter integrates,
from 1 to 500. It is sampled at each trace start. The same envelopes serve any
length: at 400 samples (800 ns) the source reports only a small loss of
accuracy, so the readout can be 20 % shorter without retraining. Samples after
the window are ignored until the next `adc_sot`.

## Demodulation

All five resonators sit on one feedline at different intermediate frequencies
(IF), so every qubit gets its own demodulator on the same ADC stream:

    out_i = I*cos(phi) + Q*sin(phi)
    out_q = Q*cos(phi) - I*sin(phi)

The oscillator is a 32-bit phase accumulator (step = `ftw`/2^32 of a turn per
sample) and a 1024-entry Q1.15 sine table, computed at elaboration from a
Taylor series in fixed point. The phase restarts at zero on every trace
start, so each trace is demodulated with the same phase and the envelopes stay
valid from shot to shot. Each output lane is one multiplier stage followed by
one multiply-add stage. This matches the source's remark that demodulation
costs two FMA units.

## Per-qubit networks

Network j reads all 45 scores (qubit-major: feature 9*q + slot) and produces
three values; its label is the index of the largest (ties go to the lower
state). The hidden layers have floor(45/2) = 22 and floor(45/4) = 11 neurons
with ReLU, and the output layer has none. That gives 1301 weights per qubit
and 6505 in all, about 100 times fewer than a 1000-500-250-243 network on the
raw trace. Each layer is fully parallel, and the pipeline registers the input,
both hidden layers, the output layer and the argmax. A label therefore comes
**exactly 5 cycles** after the merged vector (5 ns at 1 GHz, the latency given
in the source), and a new vector may enter every cycle.

Weight layout in a network's store, by flat address:

| Range | Content |
|---|---|
| 0 .. 989 | W1[o][i] at o*45 + i |
| 990 .. 1011 | b1[o] |
| 1012 .. 1253 | W2[o][i] at 1012 + o*22 + i |
| 1254 .. 1264 | b2[o] |
| 1265 .. 1297 | W3[o][i] at 1265 + o*11 + i |
| 1298 .. 1300 | b3[o] |

## Number formats

| Signal | Format |
|---|---|
| ADC samples | signed 16 bit |
| Oscillator | signed Q1.15 |
| Demodulated samples | signed 16 bit, (products) >>> 15, saturated |
| Envelopes | signed 16 bit |
| Filter accumulator | 48 bit, score = acc >>> MF_SHIFT (16), saturated to 16 bit |
| Features, activations, weights, biases | signed 16 bit, 10 fractional bits |
| Neuron | full-precision sum + (bias << 10), >>> 10, ReLU, saturate |

All right shifts are arithmetic (they round towards minus infinity). These
formats are this design's own. The source builds its FPGA estimate from the
trained model with a high-level-synthesis flow, but states no widths.
`MF_SHIFT` must be chosen with the envelope scale so that scores use the
16-bit range. A 500-sample trace of full-scale samples and full-scale
envelopes overflows the score and saturates.

## Interface and timing of the top

| Port | Meaning |
|---|---|
| `cfg` (`cfg_wr_t`) | one configuration write per cycle: `{we, target, qubit, addr, data}` |
| `trace_len` | integration window in samples |
| `adc_valid`, `adc_sot`, `adc_i`, `adc_q` | sample stream; `adc_sot` marks a trace's first sample |
| `out_valid`, `out_states[5]`, `out_logits[5][3]` | one result per trace |

Configuration targets (`cfg_target_e`):

| target | addr | data |
|---|---|---|
| `CFG_LO_FTW` | unused | 32-bit frequency word of qubit `qubit` |
| `CFG_KERNEL` | `{slot[3:0], iq, sample[8:0]}` (iq = 1 for the Q half) | 16-bit envelope word |
| `CFG_NN` | flat weight address (table above) | 16-bit weight or bias |

The design takes at most one sample per clock. On the source's 1 GHz clock,
a 500 MS/s ADC therefore means one valid cycle in two. Latency from the last
integrated sample to `out_valid` is 10 cycles: 2 in the demodulator, 2 in the
filters, 1 in the merge and 5 in the network. The filter accumulators are
free as soon as their score is out, so a new trace may start on the cycle
after the previous trace's last sample. Writing weights or envelopes while a
trace is in flight changes that trace's result, so load them between traces.

## How far the RTL follows the source

Taken from the source: the chain demodulation, per-qubit matched filters,
merge and per-qubit networks; the nine filters per qubit and their roles; the
45-22-11-3 network shape and its input made of all qubits' scores; 5 qubits, 3
levels, 500 samples at 500 MS/s; the shorter window reusing the same filters;
and the 5-cycle network latency.

This design's own choices, where the source is silent: all word widths and
the fixed-point scaling; ReLU as activation; argmax with ties to the lower
state; the numerically controlled oscillator and its per-trace phase reset;
the trace sequencer and `trace_len`; the wait-for-all merge; the configuration
bus and address map; register-based weight and envelope stores with
asynchronous read.

Known departures:

* **Resources.** The networks are fully parallel, about 6,300 multipliers for
  five qubits. That meets the 5-cycle latency, but it is far larger than the
  FPGA figures in the source (about 21 % of the DSP slices of a Zynq
  UltraScale+ ZU7EV, i.e. a few hundred multipliers). Those figures come from
  a flow that reuses each multiplier over several cycles. A time-multiplexed
  `dense_layer` would trade latency for area; it is not provided.
* **Memories.** Envelopes (45 x 1000 words) and weights live in register
  arrays read combinationally. An FPGA or ASIC build would put envelopes in
  block RAM or an SRAM macro, which adds a read stage in `matched_filter`.
* **Timing closure.** The 45-input dot product of a hidden neuron runs in one
  cycle. Whether that closes at 1 GHz has not been checked.
* **Not in hardware.** The analog front end (probe tone, resonators, mixers,
  ADCs) and all training (clustering, envelope statistics, network training)
  are outside this RTL.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares the module
bit-exactly with a reference written separately in `tb/readout_ref_pkg.sv`,
which builds its oscillator from `$sin` in double precision. Each checks the
cycle latencies stated above and ends with a `TB_RESULT checks=N failures=M`
line.

| Testbench | What it exercises |
|---|---|
| `tb_iq_demodulator` | three frequencies incl. negative and zero, random gaps, phase reset at trace start, 2-cycle latency |
| `tb_matched_filter` | traces of 1..16 samples, back-to-back traces, saturation, 2-cycle latency |
| `tb_mf_bank` | full, shortened, 0 and over-long windows, ignored tail samples, window change mid-trace, 9 scores |
| `tb_feature_merge` | simultaneous, staggered and repeated deliveries, qubit-major order, hold |
| `tb_qudit_fnn` | full-size 45-22-11-3, random weights, back-to-back vectors, 5-cycle latency, ties |
| `tb_qudit_readout_top` | whole design at default size (see below) |

`tb_qudit_readout_top` runs the full design with no parameter overrides. It
synthesises a five-tone multiplexed signal, with each qubit in a random state
placed on a three-point constellation, plus noise. Samples arrive one cycle in
two. It loads the oscillator words and all 45 x 2 x 500 envelope words. In a
first phase, the networks are loaded so that each passes its own qubit's
three qubit-filter scores through, and every label must equal the prepared
state. In a second phase all 6505 weights are random, so each label depends
on all 45 scores. Both phases check labels and logits bit-exactly, use both
the 500-sample and the 400-sample window, and feed extra samples past the
window. Phase 1 also sweeps the window from 100 ns to 1000 ns in 100 ns steps
(50 to 500 samples); with this clean synthetic signal every label is right
even at 100 ns. The test counts each of these events and fails if one never occurs.
It takes about a minute to build and a few seconds to run.

To run one, for example the top:

```
verilator --binary --timing --assert --top-module tb_qudit_readout_top \
    rtl/readout_pkg.sv tb/readout_ref_pkg.sv \
    rtl/iq_demodulator.sv rtl/matched_filter.sv rtl/mf_bank.sv \
    rtl/feature_merge.sv rtl/dense_layer.sv rtl/qudit_fnn.sv \
    rtl/qudit_readout_top.sv tb/tb_qudit_readout_top.sv
./obj_dir/Vtb_qudit_readout_top
```

Lint with `verilator --lint-only -Wall` with `readout_pkg.sv` first. The
remaining warnings are unused package constants, and `SYNCASYNCNET` on
`rst_n`, which the assertions' `disable iff` use synchronously while the
flip-flops reset asynchronously.

## Changing the size

`NQ` (up to 8), `NSAMP` (up to 512, the width of the envelope address field)
and `MF_SHIFT` are parameters of `qudit_readout_top`. The network input is
`NQ*9`, and the hidden layers follow as floor(P/2) and floor(P/4). Word widths
are package constants in `readout_pkg`. The testbenches take their sizes from
the package. `tb_qudit_readout_top` also repeats `MF_SHIFT` in a local
constant, which must be kept in step with the top.
