# Real-time reinforcement-learning feedback with an experience accumulator

This is synthesizable SystemVerilog for the real-time part of a reinforcement-learning (RL)
feedback loop at a particle accelerator. Here it damps horizontal betatron oscillations of a stored
electron bunch. A small neural network, the *policy* or *actor*, has to choose a correction kick
once per revolution of the beam, about every 370 ns. No general-purpose processor responds that
quickly and reliably, and training the network is far too slow to fit in between. The loop is
therefore split in two:

* **Inference in hardware.** Once per turn, the datapath here takes the bunch's position and
  evaluates the actor on the latest eight positions. It adds exploration noise and drives the kicker
  DAC with the result.
* **Training offline.** For every step the hardware also writes an *experience record* to
  memory: the eight inputs, the noise it added, and the network output before the noise. A
  training program (PPO in the original experiment) reads these records after each episode. It
  computes the reward from the stored positions, updates the weights and loads them back through
  registers.

Because the reward is worked out only at training time, the hardware never computes it. A new
reward definition needs no new hardware. This design calls the memory-side part the *experience
accumulator*.

The RL algorithm, the reward functions and the PPO training are software and are not part of this
RTL. Neither are the serial-link receiver, the DAC, the DDR memory and the processor: their
connections are ports of the top module.

## Datapath

```
 link stream ─► bunch_select ─► aie_ctrl ─► circ_buffer ─► actor_nn ─► output_kernel ─► DAC port
 (one sample    (bunch of       (trigger,   (latest 8      (8→16→1,     (+ Gaussian noise   (Q3.12)
  per beat)      interest,       step        samples)       ReLU on/off,  from 16 uniforms)
                 gain/offset)    budget,                    neuron mask)        │
                                 graceful                                       ▼ record
                                 stop)          pcg_rng ──► (uniform floats)  exp_buffer ─► dma_writer ─► memory bus
 processor bus ─► param_regs (weights, settings, status)
```

`kingfisher_top` wires these together. One beat of the link stream carries one bunch sample, and
a flag marks the first bunch of each turn. `bunch_select` passes on one sample per turn, the bunch
chosen in a register, after correcting it as `(x − offset) · gain`. Every selected sample goes into
the circular buffer. When an episode is running, the sample also *launches* an inference.

## One step, clock by clock

The sizes in this table are the defaults: 8 inputs, 16 hidden neurons and 16 uniforms per
Gaussian sample. Clock 0 is the edge that takes the selected link beat.

| edge | block | what happens |
|---|---|---|
| 0 | `bunch_select` | index compare, gain/offset, result registered |
| 1 | `aie_ctrl` | sample forwarded; launch decided (episode running, budget left, nothing in flight) |
| 2 | `circ_buffer` | sample written at the pointer; observation vector ready, newest first |
| 3 | `actor_nn` | inputs latched, hidden accumulators loaded with the biases |
| 4–11 | `actor_nn` | 16 MACs in parallel, one input per clock: `acc[h] += w1[h][i]·x[i]` |
| 12 | `actor_nn` | rescale, ReLU (if enabled), neuron mask |
| 13–28 | `actor_nn` | one MAC, one hidden neuron per clock: `acc += w2[h]·hid[h]` |
| 29 | `actor_nn` | output rescaled: action mean ready |
| 30 | `output_kernel` | `action = sat(mean + noise)`; record issued |
| 31 | top | action on the DAC port (`dac_valid`) |

That makes **31 clocks from link beat to DAC, or 248 ns at 125 MHz**. The network always takes
26 clocks, whatever the weights or the mask. A new step can start every 27 clocks, while a turn
lasts about 46 clocks at a 2.7 MHz revolution frequency. The original system reports 2.8 µs for the
whole loop. That figure includes the digitizer, the serial link, the DAC and the cabling, so it
cannot be compared with these 31 clocks.

## Arithmetic

Every datapath value is a 16-bit two's-complement number with 12 fractional bits (Q3.12: range
[−8, 8), step 1/4096). This covers samples, weights, biases, activations, noise and the action. The
original system evaluates the network in floating point on an AI-engine array. The fixed-point
format is this design's own choice, so trained floating-point weights have to be quantized before
loading.

* Products are full 32-bit values, and biases enter shifted left by 12, so sums are exact in the
  accumulator.
* Each layer's result is scaled back by an arithmetic shift right of 12, which rounds toward −∞,
  and then saturated to 16 bits.
* The gain/offset correction uses the same rounding and saturation. The raw link code `x` and the
  offset are integers; the gain is Q3.12.

## Network and its reconfiguration

The actor has one hidden layer of 16 neurons, each with a bias, and one linear output. Two switches
can be changed while the system runs:

* `CONFIG.relu_en = 0` removes the ReLU. The network is then linear, for example an 8-tap FIR
  filter over the position history.
* `HID_MASK` forces individual hidden neurons to zero. A smaller network, such as the 12- or
  8-neuron agents of the original experiments, is thus embedded in the 16-neuron one. The
  computation and its latency stay the same, so agents of different sizes are compared at
  identical latency. Zeroing weights has the same effect.

## Exploration noise

`pcg_rng` is a PCG32 generator: a 64-bit LCG with the XSH-RR output permutation, seeded the way
the reference `pcg32_srandom` does. It delivers one number per clock. Each number is also given as
a single-precision float `u32[31:8] · 2⁻²⁴` in [0, 1), which is exact.

`output_kernel` converts each float back to Q0.24 and adds up 16 of them. The sum has mean 8 and
variance 16/12. The kernel subtracts 8 and multiplies by √(12/16), which gives an approximately
standard-normal sample by the central limit theorem. It then multiplies by the run-time `SIGMA`
register, so `SIGMA` is the noise's standard deviation in Q3.12. A new Gaussian sample is ready
every 16 clocks. A step takes at least 27 clocks, so consecutive steps never share a sample.

The record stores the noise as actually added, so the action taken is `mean + noise`, before
saturation.

## Episodes

`aie_ctrl` runs this state machine:

```
IDLE --arm--> ARMED --trigger rising edge--> RUN --N_STEPS launched or halt--> DRAIN --nothing in flight--> IDLE
```

* Outside RUN the buffer still fills, so the first observation of an episode is real history.
* The trigger input is asynchronous. It goes through a two-flop synchronizer and only its edge
  counts.
* DRAIN is the graceful stop. No new inference starts, but the one already running completes, so
  its action and record are not lost.
* `irq_done` pulses when the DAC code returns to zero, one clock after the last action. Outside an
  episode the DAC code is held at zero.
* Only one inference is ever in flight. A sample that arrives while one is running is not launched
  and is counted as an *overrun*; the count restarts with each episode. This cannot happen at
  one sample per 46-clock turn; it shows up if samples come faster than every 27 clocks.

## Experience records in memory

`exp_buffer` queues up to 16 records, so memory latency never holds up the real-time chain. If
the queue is full, the new record is dropped and counted in `OVERFLOW`, which also restarts with
each episode. `dma_writer` writes each record as ten 32-bit words, each a Q3.12 value
sign-extended to 32 bits:

| word | content |
|---|---|
| 0 | action mean (network output before noise) |
| 1 | noise added |
| 2 … 9 | x(t), x(t−1), … x(t−7) |

Record *n* of an episode is at byte address `DMA_BASE + 40·n`. A 2048-step episode fills
81,920 bytes. An episode start resets *n* once the record in progress has finished. Records past
`N_STEPS` in one episode are dropped and counted in `DROPPED`. The memory bus is a simple
address/data/valid/ready write port. Once `mem_valid` is high, the address and data hold until
`mem_ready`. It stands in for the memory controller's AXI port, so connecting to AXI needs an
adapter.

## Registers

The bus is word-addressed, with one write per clock and a combinational read. Datapath values sit
in bits 15:0.

| addr | name | |
|---|---|---|
| 0x000 | CTRL | write: bit0 arm, bit1 halt, bit2 reload generator seed (pulses) |
| 0x001 | CONFIG | bit0 ReLU enable (reset 1) |
| 0x002 | N_STEPS | steps per episode (reset 2048) |
| 0x003 | BUNCH | bunch of interest |
| 0x004 / 0x005 | GAIN / OFFSET | correction, Q3.12 gain (reset 1.0) / raw-code offset |
| 0x006 | SIGMA | noise standard deviation, Q3.12 (reset 0) |
| 0x007 | HID_MASK | hidden-neuron enables (reset 0xFFFF) |
| 0x008 | B2 | output bias |
| 0x009 | DMA_BASE | byte address of the episode's record area |
| 0x00A–0x00D | SEED, SEQ | 64-bit generator seed and stream |
| 0x010+h | B1[h] | hidden biases |
| 0x020+h | W2[h] | output weights |
| 0x080+8h+i | W1[h][i] | hidden weights, i = input |
| 0x100–0x105 | status | state; and, for the current episode, steps done, overruns, queue overflows, records written; records dropped past the limit |

Weights can be written at any time. Writing them between episodes keeps each episode on one
policy.

## What follows the original system and what does not

The following comes from the described system:

* a bunch-selection and gain/offset stage;
* control logic with a start trigger, a step counter and a graceful stop;
* a circular buffer of the latest eight samples;
* an 8→16→1 network whose ReLU can be switched off, which forwards its inputs, and in which
  smaller networks are embedded at constant latency;
* a PCG generator of 32-bit float uniforms at one per clock;
* Gaussian noise as the sum of 16 uniforms, with a run-time standard deviation;
* a record of inputs, random value and pre-noise output, written to DDR by DMA;
* episodes of 2048 steps, and parameters reloaded at run time.

The following are this design's own choices:

* fixed-point arithmetic instead of floating point;
* the clock schedule and its latency;
* one sample per link beat with a turn marker;
* the order of the gain/offset correction;
* the arm/trigger/drain state machine and the overrun rule;
* the √(12/16) noise normalization, and recording the scaled noise;
* the record word order;
* the queue depth and its drop policy;
* the simple memory bus and the register map;
* holding the DAC at zero outside episodes;
* the 125 MHz clock.

In the original system, the buffer, the network and the noise stage run on AI-engine tiles that
pass data over cascade streams. Here everything is ordinary logic. Only one hidden layer is built,
as described. The PCG variant and the float conversion are not specified in the source either.

## Files

`rtl/kf_pkg.sv` holds the shared format, sizes, the state enum and the record struct. There is one
module per file in `rtl/`. `tb/tb_<module>.sv` is a self-checking testbench for each module.
`tb/tb_workloads.sv` runs the five actor configurations of the original experiments: L2 reward
with 12 neurons, L2/8, Tanhsq/16, L2/16 and L1/16. Each runs a full 2048-step episode. The
testbench checks every record and the latency, then computes the L1, L2 or tanh² reward from the
stored records alone, as a training program would.

## Simulating

All testbenches run with plain Verilator 5 (`--timing`). Each prints
`TB_RESULT checks=N failures=M`:

```
verilator --binary --timing --assert --top-module tb_kingfisher_top \
    -y rtl -y tb +libext+.sv rtl/kf_pkg.sv tb/tb_kingfisher_top.sv
./obj_dir/Vtb_kingfisher_top
```

`tb_kingfisher_top` runs the design at its default sizes, with a damped-oscillator beam model in
the loop. Its first episode is a full 2048-step one without noise, in which every action is
compared with an integer model of the network and every latency is checked. Further episodes cover:

* reloaded weights, linear mode, 12 of 16 neurons, noise at σ = 0.5 with its statistics checked,
  and another bunch;
* a reseeded generator: every noise value recorded afterwards must be the Gaussian sum of 16
  consecutive outputs of a software PCG32 seeded the same way;
* a halt after about 100 steps;
* 12-beat turns, which cause overruns;
* a stalled memory, which overflows the queue.

The testbench counts each of these mechanisms and fails if one never happened. It runs in a few
seconds.

To change a size, override the parameters of `kingfisher_top` (`N_HID`, `FIFO_RECS`) or
`kf_pkg`. Up to 8 inputs fit the register map.
