# SpinAPS core: a first-to-spike inference engine for probabilistic spiking networks

SpinAPS is an inference accelerator for two-layer spiking neural networks whose
output neurons are *probabilistic*: each output neuron turns its membrane
potential into a spike probability, and a random draw decides whether it
spikes. Classification uses **first-to-spike** decoding. The sample belongs to
the class of the first output neuron that spikes, so most samples are decided
after a few time steps and the rest of the work is skipped. The synapses sit in
an STT-RAM (spin-transfer-torque magnetic RAM), used as ordinary binary
storage: an 8-bit weight is eight 1-bit MTJ cells. That removes the
ADCs and DACs that analog in-memory designs need. The neurons are plain digital
logic: adders, a shift-and-add sigmoid and an LFSR.

This repository has synthesizable SystemVerilog for one SpinAPS core in its
baseline configuration, plus a behavioural model of the STT-RAM subarrays and
self-checking testbenches:

* 256 input neurons and 256 output neurons
* 8-bit synapses
* a presentation time of T = 8 algorithmic steps
* a spike window of tau = 7 steps
* a 500 MHz neuron clock and a 100 MHz synaptic memory

## 1. What one core computes

Input neuron *j* produces a spike train s_{1,j}..s_{T,j}. In the network this
core serves, the spikes are Bernoulli-coded from the normalised input, but that
coding happens before the core. At step *t* the membrane potential of output
neuron *i* is

    u_i(t) = gamma_i + sum_j sum_{k=1..min(t-1,tau)} s_{t-k,j} * w[j][k][i]

Here w[j][k][i] is the synapse from input *j* to output *i* at lag *k*. It is
the GLM stimulus kernel with binary basis functions, so every lag has its own
weight and no multiplier is needed. gamma_i is the bias. There is no feedback
kernel, because first-to-spike decoding stops at the first output spike.
u_i(t) is rebuilt from scratch at every step.

The potential goes through a piecewise-linear sigmoid, which gives a probability
p_i. The neuron spikes if p_i is greater than an 8-bit pseudo-random number.
The first step at which any neuron spikes ends the sample.

## 2. Synapse memory layout

The main idea of the design is how the kernel is stored.

* A **word line** is 2048 bits: one 8-bit synapse for each of the 256 output
  neurons. Output neuron *i* owns bits `8i+7 : 8i` of every line.
* Input neuron *j* owns tau = 7 consecutive word lines, `7j .. 7j+6`. Line
  `7j+k-1` holds the weights for a spike *k* steps old.
* Line 1792 holds the 256 biases. Lines 1793..2047 are unused.

At step *t*, reading the word line of every (input, lag) pair that had a spike
delivers the whole matrix-vector product, 256 synapses per read. Lines with
no spike are never read. Reading a word line is one **synaptic operation**.
One read per 10 ns memory cycle gives 256 × 100 MHz = 25.6 G synaptic
operations per second, whatever the precision.

The memory (`synaptic_memory`) is four banks (`stt_bank`). Each bank is a
predecoder plus four 64 × 4096-cell subarrays (`stt_subarray`), and each
subarray has a 128-bit port behind a 32:1 column multiplexer. In total that is
4 × 4 × 64 × 4096 = 2048 × 2048 bits. Every access uses all 16 subarrays at
once, and subarray *s* (= 4·bank + index) supplies the synapses of output
neurons 16s..16s+15. Address bits [10:5] select the row and bits [4:0] the
column group.

## 3. The spike window and the address store

`in_reg` keeps a T-bit shift register per input neuron. The spike of step *t*
enters at bit 0. The **spike window generator** (`spike_window`) is a single
multiplexer shared by all input neurons, with select = t−1. It passes bits
1..min(t−1, tau) of the register as a tau-bit pattern and zeroes the rest. The
pattern is written most recent first. At t = 1 it is `0000000`. At t = 3,
after spikes s1 and s2, it is `s2 s1 00000`.

The controller walks the input neurons 0..255 one per cycle. The **address
store** (`addr_store`) turns each set bit of a pattern into its word-line
address, earliest lag first, one address per cycle. It queues the addresses in
an 8-entry FIFO, together with the input's sign flag. An all-zero pattern
costs one cycle and no memory access. When the FIFO is full the walk stalls.
This happens whenever more than one line in five is active, because the memory
takes a line only every five cycles.

## 4. One time step, cycle by cycle

| phase  | what happens | cycles |
|--------|--------------|--------|
| LATCH  | `in_valid`/`in_ready` handshake takes the 256 spikes of step *t*. Potentials and spikes are cleared. | ≥ 1 |
| SCAN   | Walk the 256 input neurons. Read the bias line, then every queued address. Each returned line is added into all 256 accumulators. | max(256 + active, 5 × reads) |
| DRAIN  | Wait for the last read (4-cycle latency) and its addition. | ≤ 5 |
| EVAL   | 16 passes. In pass *p* each of the 16 PWL generators serves output neuron 16g + p, and that neuron's comparator draws its spike. The LFSR advances once per pass. | 16 |
| DECIDE | If any neuron spiked, finish with `decided = 1`. Otherwise go to step t+1. After step T, finish with `decided = 0`. | 1 |

Steps with many spikes are memory-bound, at 5 cycles per word line. For
example, the all-spike stress sample reads 7176 lines in 36285 cycles, which
is 5.06 cycles per line. Sparse steps are bound by the 256-cycle neuron walk.

## 5. Number formats and the neuron datapath

* **Synapse**: 8-bit sign-magnitude (bit 7 = sign, bits 6:0 = magnitude). For
  a neuron flagged as a negative input (`in_sign`), the sign bit is flipped as
  the synapse is added. That flip is the reason for sign-magnitude.
* **Membrane potential**: 18-bit two's complement. One synapse LSB is 1/8 of
  the potential, so the value has 3 fraction bits. The adders saturate at
  ±2^17 instead of wrapping. 1793 lines × 127 could otherwise overflow.
* **Clipper**: clips u to [−8, 8] and recodes it as 8-bit sign-magnitude
  `S IIII FFF`.
* **PWL sigmoid**: take |x| = n + f, with n the integer part and f the fraction
  in eighths. For negative x, y = (1/2 − f/4) / 2^n. For positive x,
  y = 1 − (1/2 − f/4) / 2^n. The output is 256·y, computed as
  `(128 − 8·FFF) >> IIII`. The positive side is 256 minus that, and 256
  saturates to 255. Sample values:

  | x | −8 | −2 | −1 | −0.5 | 0 | 0.5 | 1 | 2 | 8 |
  |---|----|----|----|------|---|-----|---|---|---|
  | p | 0  | 32 | 64 | 96   |128| 160 |192|224|255|

  The result is never more than 0.07 from the true logistic function.
* **LFSR**: 16-bit Fibonacci LFSR, x^16 + x^14 + x^13 + x^11 + 1, seed
  0xACE1. Its low 8 bits are the random number. A neuron spikes when p > rnd,
  which gives probability p/256.

## 6. Interface of `spinaps_core`

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset.

* **Programming**: hold `wr_en`, `wr_addr` (11 bits) and `wr_data` (256·b bits, 2048 at b = 8)
  until a cycle with `wr_ready`. A write takes 5 cycles (the 10 ns write
  pulse). Writes are only accepted while the core is idle.
* **Sample**:
  1. Pulse `start` with `in_sign` valid.
  2. For each step, present `in_spikes` with `in_valid`. The step is taken in
     the cycle where `in_ready` is also high.
  3. `done` rises at the end. `decided`, `decision_class` (lowest index if
     several neurons spike together), `decision_t` and `out_spikes` then hold
     until the next `start`.
* **Counters** (free-running, 32 bits):
  * `cnt_reads`: word lines read, bias reads included
  * `cnt_stall`: address-store stall cycles
  * `cnt_sat`: cycles with a saturating adder
  * `cnt_clip`: clipped potentials
  * `cnt_flip`: sign-flipped reads
  * `cnt_zero_win`: all-zero windows

`out_spikes` and `in_spikes` are where a network-on-chip router would attach
in a tiled system.

## 7. What follows the source design and what was chosen here

**Taken from the published architecture:**

* Synapse precision b as a parameter (`WB_P`, 8 by default). The word width
  is 256·b bits and each subarray port 16·b bits, so that b = 5, 6 and 7 give
  the smaller memories of the lower-precision cores. The neuron logic stays
  the same at every b.
* 256 × 256 neurons, 8-bit synapses, T = 8, tau = 7.
* The word-line mapping of the kernel and the always-present bias line.
* The SIPO input registers and the shared window multiplexer with select t−1.
* Address registers in front of the memory.
* An 18-bit membrane accumulator with a sign flip for negative inputs.
* Clipping to [−8, 8] in 1+4+3 bits, and the power-of-two PWL sigmoid.
* One PWL generator per 16 output neurons, one comparator per neuron, and a
  shared 16-bit LFSR with an 8-bit comparison.
* First-to-spike termination.
* Memory size: 2048 × 2048 bits in 4 banks of 4 subarrays of 64 × 4096 cells
  with 128-bit ports.
* Memory speed (100 MHz, 7.34 ns read, 10 ns write) and the 500 MHz logic
  clock.

**Chosen here, because the source is silent:**

* The sign-magnitude synapse format and the 3-fraction-bit scale of the
  potential.
* Saturation in the adders.
* The bias line is read as the first access of every step, instead of being
  held "always on". The sum is the same.
* The bank/subarray address split. Every subarray holds a slice of every word
  line, so that a whole line is read in one access.
* The 8-entry address FIFO and all handshakes.
* The LFSR polynomial and seed, the bits used, and advancing once per pass.
* The PWL neuron order (pass *p* serves neurons 16g + p) and the rounding of
  the PWL output.
* Lowest-index tie-breaking, and ending with `decided = 0` when nothing spikes
  by step T.
* Reset behaviour.

One point in the source is inconsistent. It says the membrane potential is
quantized to b bits, and it also says the potential is 18 bits before
clipping, with the neuron logic unchanged across precisions. This design
follows the 18-bit datapath: at every b, the potential is 18 bits and the
PWL output 8 bits.

**Not built:**

* The packet-routing mesh and the 64 × 64 tiling into a million-neuron system,
  which the source only names.
* The Bernoulli rate encoder in front of the core.
* The benchmark networks themselves. The handwritten-digit network (784
  inputs, tau = 8) and the activity-recognition network (T = tau = 16) are
  larger than one core and would need several cores, with their partial
  potentials combined.

**The STT-RAM subarray is a behavioural model.** Each MTJ cell is a stored bit,
and the timing is a cycle count. The rest is synthesizable. The memories stay
as arrays, so they map to RAM macros or, at a large cost, to flip-flops.

## 8. Files

| file | content |
|------|---------|
| `rtl/spinaps_pkg.sv` | sizes, timing constants, number-format types |
| `rtl/spinaps_core.sv` | top level: one core |
| `rtl/core_controller.sv` | step sequencing and first-to-spike termination |
| `rtl/in_reg.sv`, `rtl/spike_window.sv`, `rtl/addr_store.sv` | input layer |
| `rtl/synaptic_memory.sv`, `rtl/stt_bank.sv`, `rtl/stt_subarray.sv` | banked STT-RAM (the subarray is behavioural) |
| `rtl/membrane_adder.sv`, `rtl/clipper.sv`, `rtl/pwl_sigmoid.sv`, `rtl/lfsr16.sv`, `rtl/spike_comparator.sv` | output layer |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_spinaps_core_b5.sv` | the end-to-end test on a core built for 5-bit synapses |

## 9. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each has a watchdog. With Verilator 5, run from the repository
root:

    verilator --binary --timing --assert -y rtl rtl/spinaps_pkg.sv \
        tb/tb_spinaps_core.sv --top-module tb_spinaps_core -o sim
    ./obj_dir/sim

Replace `spinaps_core` with any module name to run its unit test.

`tb_spinaps_core` runs the core at its full default size, with no parameter
overrides. It builds in about 30 s and runs in under a second. It works as
follows:

1. Programs all 1793 used word lines.
2. Runs 8 random samples, with input rates from 4 % to 39 % and random input
   signs.
3. Loads a stress weight set and runs two more samples:
   * all inputs negative: no decision, saturation, clipping and stalls
   * all inputs positive: all 256 neurons spike at step 2, and the tie goes to
     neuron 0
4. Compares each result with a reference model written in the testbench from
   the equations above. The compared values are:
   * the decision, its step and the spike vector
   * the number of word lines read
   * a cycle budget of at least 5 cycles per line
5. Counts each mechanism: early decision, decision after step 2, no decision,
   tie, saturation, clipping, stall, sign flip and skipped zero window. A
   mechanism that never occurs counts as a failure.

`tb_spinaps_core_b5` runs the same test on `spinaps_core #(.WB_P(5))`, with
weights of at most ±15. The bias can then reach only −15/8, so no potential
saturates and every neuron has a spike probability above zero at step 1.
For that reason it does not require saturation, late decisions or a sample
without a decision. Change its `WBT` to 6 or 7 for the other precisions.

The unit tests check each block against an independent model:

* the window example above, exhaustively
* the PWL formula for every input code
* the LFSR period of 65535
* address order and FIFO back-pressure
* memory latency and the rate of one line per 5 cycles
* controller ordering

To change the network size, edit the constants in `spinaps_pkg` or the
parameters of `spinaps_core`. The synaptic memory is built for exactly 2048-bit
word lines (NY × 8 = 2048) and 2048 lines (NX × tau + 1 ≤ 2048).
