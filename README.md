# A time-multiplexed NEF digit recogniser

This RTL implements a three-layer feed-forward classifier built the way the Neural
Engineering Framework (NEF) builds networks. A 28 x 28 handwritten digit is projected
through fixed random weights onto 8192 non-linear hidden neurons. The hidden neurons'
firing rates are combined linearly, with trained decoding weights, into ten output
neurons, one per digit. The largest output names the digit. Only the decoding weights are
trained (off-chip, by a pseudo-inverse method), so the hardware is only the forward pass.

The hardware has one physical neuron, not 8192. A single encoder and a single rate neuron
serve all 8192 hidden neurons in turn, one every four clock cycles. Two tricks keep almost
everything out of memory:

* **The random input weights are never stored.** They come from 49 20-bit LFSRs. The LFSRs
  are reseeded at every digit and stepped once per clock, so hidden neuron *n* always sees
  the same weights. Only 49 seeds are kept.
* **The hidden neurons have no per-neuron parameters.** The tuning curve of a neuron is a
  fixed function of its position (0..63) in its 64-neuron "core". All 128 cores share the
  same 64 curves. They still behave differently because each core gets a different random
  projection of the digit.

The only large memory is the decoding-weight RAM: ten 6-bit weights per hidden neuron,
8192 x 60 bits = 480 kbit. One digit takes 8192 x 4 = 32,768 cycles, which is about 123 µs
or about 8,100 digits per second at 266 MHz. Digits can be streamed back to back.

## What the circuit computes

For a binary digit `img[0..783]` (a pixel is 1 when its grey value is above 0), hidden
neuron `n = 64*c + i` (core `c`, index `i`) and digit `d`:

```
sum[n]   = Σ_k img[k] · rw[n][k]                  rw = 5-bit signed LFSR weight, -16..15
stim[n]  = clamp((sum[n] >>> 1) + 128, 0, 254)    stimulus code; 0..254 stands for -1..1
T, gain  = 255 - (stim + 4i),    i                 if i < 32
           stim + 4i - 252,      63 - i            if i >= 32
F[n]     = max(gain · T / 32, 0)                   firing rate, 0..126 (7 bits)
y[d]     = Σ_n F[n] · w[n][d]                      w = 6-bit signed decoding weight
result   = argmax_d y[d]                           ties go to the lower digit
```

Each tuning curve is a "broken stick". For neurons 0..31 the rate falls as the stimulus
rises and reaches zero at a point set by the index. Neurons 32..63 are the mirror image,
with rising curves. The slope grows with the distance from the ends of the core.
The products `F · w` fit in 13 bits. The sums over 8192 neurons fit in the 28-bit output
accumulators.

## The time slot and the pipeline

The global counter steps through one **time slot** of four cycles per hidden neuron.
Several units work on different neurons at once. Counting cycles from the first cycle `t0`
of a digit's pass, neuron `n` goes through:

| cycle (from t0) | unit                   | work on neuron n                                         |
|-----------------|------------------------|----------------------------------------------------------|
| 4n + p, p=0..3  | encoder, stage 1       | pixels 196p..196p+195 select their LFSR weights; fourteen 14-input adders form 9-bit partial sums |
| 4n + p + 1      | encoder, stage 2       | one 14-input adder gives the 196-pixel sum, added to a running total |
| 4n + 5          | encoder output         | `stim` valid; decoding-weight RAM read; neuron slot cycle 0 |
| 4n + 5          | multiplier 0           | gain × T, and F_rate is latched at the end of the cycle   |
| 4n + 6 … 4n + 9 | multipliers 0, 1, 2    | F_rate × the ten decoding weights (table below)          |
| 4n + 10         | neuron output          | `mlt_valid`, the ten products of neuron n                 |
| 4n + 10         | output layer           | the ten products are added to the ten sums               |

Three 9 x 9-bit multipliers do the eleven multiplications of a slot:

| neuron slot cycle | 0 (4n+5)         | 1 (4n+6) | 2 (4n+7) | 3 (4n+8) | 0 of next slot (4n+9) |
|-------------------|------------------|----------|----------|----------|-----------------------|
| multiplier 0      | gain × T → F_rate | idle     | F × w0   | F × w1   | (next neuron's gain × T) |
| multiplier 1      | (previous neuron) | F × w2   | F × w3   | F × w4   | F × w5                |
| multiplier 2      | (previous neuron) | F × w6   | F × w7   | F × w8   | F × w9                |

F_rate only exists from slot cycle 1, so multipliers 1 and 2 run one cycle behind
multiplier 0. They finish in cycle 0 of the following slot, while multiplier 0 is
already working on the next neuron. This is also why the weight RAM is read in slot
cycle 0: its registered output then holds neuron n's weights from cycle 1 to the next
cycle 0, which is exactly when they are used. Each product goes into its own `Mlt_rlt`
register, and the ten are handed on together.

After the last neuron (n = 8191), the output layer spends one cycle finding the largest
sum. It reports `result_valid` **32,768 + 9 = 32,777 cycles** after the digit was
accepted, then clears the sums. The counter raises `digit_ready` in the last cycle of a
pass. A waiting digit therefore starts with no gap, and back-to-back results come exactly
32,768 cycles apart. The stages of two consecutive digits overlap without conflict: the
input buffer and the LFSRs are used only in the encoder's first stage, and the first
products of the next digit reach the output layer four cycles after the last products
of the previous one.

## The random-weight generators

The weights have to be reproduced exactly by the training software, so here is the full
definition. Generator `g` (0..48) is a Fibonacci LFSR with polynomial
x^20 + x^17 + 1 and a period of 2^20 - 1:

```
next = {s[18:0], s[19] ^ s[16]}
```

It loads `seed[g]` when a digit is accepted and steps once per active cycle. Its state
`s` gives four weights, weight j being `s[5j+4:5j]` read as two's complement.
In slot cycle `p` of neuron `n`, generator `g` has stepped `4n + p` times. It weights
pixel `196p + 4g + j` with weight j. A software model that steps 49 such registers in that
order produces the same stimuli. Seeds must not be zero. The reset seeds are fixed
non-zero values, and the 49 seed registers can be rewritten through the seed port.

## Interface

| port                                   | dir | width       | use                                                     |
|----------------------------------------|-----|-------------|---------------------------------------------------------|
| `clk`, `rst_n`                         | in  | 1           | clock; asynchronous active-low reset                    |
| `digit_valid`, `digit_ready`, `digit`  | in/out/in | 1, 1, 784 | binary digit, pixel i (row-major) in bit i; taken when valid and ready are both high |
| `seed_we`, `seed_addr`, `seed_wdata`   | in  | 1, 6, 20    | write seed of generator `seed_addr` (0..48); used from the next digit |
| `w_we`, `w_addr`, `w_wdata`            | in  | 1, 13, 60   | write the decoding weights of hidden neuron `w_addr`; weight for digit d in bits 6d+5..6d |
| `result_valid`                         | out | 1           | one-cycle pulse per digit                               |
| `result`                               | out | 10          | one-hot winner (bit d = digit d)                        |
| `result_idx`                           | out | 4           | winner as a number 0..9                                 |
| `y`                                    | out | 10 x 28     | the ten output sums of that digit                       |

The outputs hold until the next result. Write seeds and weights only while no digit is in
flight. Parameters of `nef_top`: `N_CORES` (default 128, so 8192 neurons; the neuron count
must be at least 2) and `STIM_SHIFT` (default 1). All other sizes are in `nef_pkg`.

## How far this follows the published design

These parts are as published: the topology, 784 binary pixels, 128 cores of 64 neurons,
four-cycle slots with 196 pixels per cycle, and 49 20-bit LFSRs each cut into four 5-bit
signed weights and reseeded per digit. So are the 196 two-input multiplexers, the
fourteen 14 x 5-bit adders followed by a 14 x 9-bit adder, the two-cycle stimulus latency,
the lower-half tuning curve, the 7-bit firing rate, and three shared 9-bit multipliers
with multiplier 0 computing, latching, then multiplying by weights 0 and 1. Also as
published: 6-bit decoding weights (60 bits per neuron), and an output layer of one adder
and one register per digit that reports the largest output and clears it.

The following are this design's own choices or corrections:

* **Upper half of the core.** The published formula for neurons 32..63,
  `T = Stim + 4i` with gain `i`, gives rates near 1000. That contradicts the stated 7-bit
  firing rate. Here the upper half is the mirror image of the lower half
  (`T = Stim + 4i - 252`, gain `63 - i`), which stays in 0..126.
* **Stimulus coding.** The 15-bit pixel sum is mapped to 0..254 by `(sum >>> 1) + 128`
  with saturation. Only the 0..254 range is specified. The shift is the `STIM_SHIFT`
  parameter. A weight stream with a different scaling needs a matching software model.
* **Multiplier timing.** Multipliers 1 and 2 run one cycle later than a literal reading of
  the schedule, because F_rate does not exist earlier. The products leave the neuron
  together, 5 cycles after its stimulus.
* **One global counter.** The published drawings show a global counter both in the
  encoder and beside it. Here a single counter drives the encoder, and the neuron number
  travels down the pipeline with the data.
* The LFSR polynomial, the weight field order, the pixel order, two's-complement weights,
  the weight word packing, the one-hot `result` plus binary `result_idx`, the lowest-digit
  tie rule, the 28-bit accumulators, the valid/ready handshake with back-to-back digits,
  the seed and weight write ports, and the reset behaviour.

Not included: the JTAG link and the host program that send digits and weights (their role
is taken by the ports above), the grey-to-binary conversion (done on the host), and the
OPIUM training that finds the seeds and decoding weights.

## Verification

Every module has a self-checking testbench in `tb/`. The testbenches compare against
`tb/tb_nef_ref_pkg.sv`, a behavioural model written from the equations above: it steps
the LFSRs in software, forms the sums, tuning curves and outputs, and is not derived from
the RTL. They check values and also exact cycle timing:

* `tb_nef_global_counter`, `tb_nef_input_buffer`, `tb_nef_rw_generator` check the slot
  sequencing, the pixel quarters, the LFSR sequence and its 2^20 - 1 period.
* `tb_nef_accumulator` and `tb_nef_encoder` check the 784-pixel sums and stimulus codes,
  the two-cycle latency, reseeding, and saturation at both ends.
* `tb_nef_neuron` covers all 64 indices, stimuli 0 and 254, extreme weights, gapped and
  back-to-back slots, and the 5-cycle latency.
* `tb_nef_weight_buffer` fills the full 8192-word RAM. `tb_nef_output_layer` checks sums,
  winners, ties, clearing, and a digit that starts in the resolve cycle.
* `tb_nef_tm_system` (one core) and `tb_nef_top` (two cores, five digits) check every
  stimulus, every product and every result. `tb_nef_top` also checks the 4N + 9 latency
  and the 4N spacing. It counts each mechanism and fails if one never happens: idle
  start, waiting on `digit_ready`, back-to-back start, low and high stimulus saturation,
  firing-rate clamp, both halves of the core, and identical results for a repeated digit.
* `tb_nef_hidden_sizes` builds the recogniser with 1k, 2k, 4k, 8k, 12k and 16k hidden
  neurons (`N_CORES` = 16 to 256) and checks two digits at each size.
* `tb_nef_top_full` runs the design at full size with default parameters: 8192 neurons and
  three digits, two of them back to back. It takes under a second in Verilator.

The digits and weights in these tests are random. There is no MNIST data and no trained
weights, so this RTL is verified to compute the network exactly as defined above, bit for
bit. It is **not** verified to reach any recognition rate. That depends on seeds and
weights from a training flow that uses the same LFSR, stimulus coding and tuning curves.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/nef_pkg.sv tb/tb_nef_ref_pkg.sv tb/tb_nef_top.sv --top-module tb_nef_top
./obj_dir/Vtb_nef_top
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.

## Files

| file                        | contents                                                   |
|-----------------------------|------------------------------------------------------------|
| `rtl/nef_pkg.sv`            | sizes, types, default seeds                                |
| `rtl/nef_top.sv`            | the recogniser: time-multiplexed system + output layer     |
| `rtl/nef_tm_system.sv`      | encoder, hidden layer, global counter, weight RAM          |
| `rtl/nef_global_counter.sv` | slot phase and neuron counter                              |
| `rtl/nef_encoder.sv`        | input buffer, 49 LFSRs, 196 muxes, accumulator, stimulus coding |
| `rtl/nef_input_buffer.sv`   | 784-bit digit register, quarter select                     |
| `rtl/nef_rw_generator.sv`   | one 20-bit LFSR, four 5-bit weights                        |
| `rtl/nef_accumulator.sv`    | two-stage adder tree and 4-cycle running sum               |
| `rtl/nef_parallel_adder.sv` | N-input signed adder                                       |
| `rtl/nef_neuron.sv`         | rate neuron: tuning curve, three shared multipliers        |
| `rtl/nef_mult9.sv`          | 9 x 9 → 18-bit signed multiplier                           |
| `rtl/nef_weight_buffer.sv`  | 8192 x 60-bit decoding-weight RAM                          |
| `rtl/nef_output_layer.sv`   | ten accumulators, winner search                            |
