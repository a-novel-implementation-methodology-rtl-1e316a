# Gallager-B decoding on a neuromorphic core array

This repository holds synthesizable SystemVerilog for a small neuromorphic
processor and for an LDPC decoder built from its neurons. The processor is a
mesh of spiking-neuron cores in the style of RANC and TrueNorth. The decoder
is a hard-decision Gallager-B (GaB) decoder, configured into eight of those
cores.

The main idea is the neuron. A classic integrate-and-fire neuron can only add
weights and compare the result with a threshold. Parity checks then need many
neurons and several ticks per XOR. Here the neuron block has a second mode: it
XORs the least significant bit of the incoming weight with the least
significant bit of the running potential. A single neuron can therefore
compute the parity of all its active inputs in one tick. The decoder's check
nodes and syndrome checks are built from such neurons.

## The neuron block (`neuron_block`)

Each core has one neuron block, shared by all its neurons. It visits one
synapse per clock. For neuron *j* and axon *i*:

* **Operand A.** A is the weight `w_j[τ_i]`, chosen by the axon's 2-bit
  type `τ_i`. It is replaced by zero unless the axon spikes in this tick and
  the crossbar connects it to neuron *j* (`process_spike`).
* **Operand B.** B is the neuron's potential from the previous tick, `v_j(t-1)`,
  on the first axon (`new_neuron`). On every later axon it is the partial
  result held in the NP register.
* **Combine (C).** In LIF mode, C = A + B. In XOR mode, C = {0…0, A[0] ^ B[0]}.
* **Output stage.** After the last axon, the output stage reads NP, adds the
  leak, and compares the result with the negative threshold (`<=`, giving the
  negative reset value). It then compares with the positive threshold (`>=`,
  giving the positive reset value and a spike). When both comparisons hold,
  the positive one wins, following the order of the muxes.

All values are 9-bit two's complement. Nine bits is the smallest width that
holds the weight −202 used by the iteration counter. Only hard reset is
built, because every neuron of the decoder uses it.

## A core (`neuromorphic_core`)

A core has 256 axons and 256 neurons. It is made of four parts:

* `core_sram` holds, per neuron:
  * a crossbar row;
  * the parameter set: four weights, leak, two thresholds, two reset values,
    the operation (LIF or XOR), the destination offset (dx, dy), the
    destination axon and the delivery delay;
  * the potential.

  It also holds the type of each axon. Reads are combinational, and a
  configuration port writes one neuron or one axon per clock.
* `scheduler` is a ring of 16 slots of 256 bits. A spike that arrives with
  delay *d* is set in the slot *d* ticks ahead. Delay 0 is treated as 1. On
  each tick the next slot becomes the core's axon vector for that tick and is
  cleared.
* `core_controller` walks neurons × axons, one synapse per clock. Neuron *j*'s
  output stage is evaluated in the clock of neuron *j+1*'s first axon. A tick
  therefore takes 256 × 256 + 1 = 65,537 clocks, which is about 1.5 kHz at
  100 MHz.

  A neuron that fires loads a one-entry packet register. If the router has
  not yet taken the previous packet, the controller stalls. `done` is high
  when the core is idle and its packet has left.
* `neuron_block` is described above.

A spike produced in tick *t* with delay *d* is integrated in tick *t + d*.
With delay 1, it is used in the next tick.

## The mesh (`router`, `ranc_grid`, `tick_generator`)

Each core has a five-port router: local, north, east, south and west.

* Each input has a 4-entry FIFO (`spike_fifo`).
* Routing is dimension-ordered: a packet moves east or west until dx = 0,
  then south or north until dy = 0, then goes to the local core.
* dx or dy is decremented in magnitude at each hop.
* Each output has a round-robin arbiter.

`ranc_grid` connects ROWS × COLS such tiles (5 × 5 by default) and adds the
host connections:

* Packets leaving the east edge come out as one output per row. This is how
  results reach the host.
* Packets leaving by the other edges are dropped and counted.
* The host can inject a spike into any core's scheduler.

`tick_generator` raises a one-cycle tick only when all of these hold:

* `run` is high;
* every core reports `done`;
* every router is empty;
* two cycles have passed since the last tick.

Ticks therefore follow the work rather than a fixed timer.

## The decoder (`gab_map_pkg`, `gab_config_loader`, `gab_decoder`)

The code is the paper's 8-bit example. H is 4 × 8, each variable is in two
checks (d_v = 2) and each check covers four variables (d_c = 4):

```
c0: 0 1 0 1 1 0 0 1
c1: 1 1 1 0 0 1 0 0
c2: 0 0 1 0 0 1 1 1
c3: 1 0 0 1 1 0 1 0
```

It has 32 codewords. Eight cores carry out the decoder. Core *k* sits at
x = k mod COLS, y = k div COLS.

| k | core | what its neurons do |
|---|------|---------------------|
| 0 | Input | An 8-bit register holds r through a feedback loop. The core forwards r to the VNU core, and starts the VNU and iteration counter on `en`. On `rst_in` it clears itself and forwards the reset. |
| 1 | VNU | 16 neurons `v_n c_m` vote between r_n and the message from the other check. A tie gives r_n. 8 neurons `x'_n` take the majority of r_n and both check messages. Two enable relays. |
| 2 | CNU | 16 XOR neurons `c_m v_n`, each the parity of the three other variables of check m. An enable relay hands the token back to the VNU core. |
| 3 | Parity | 4 XOR neurons form the syndrome s = H·x'. 8 relays pass x' on to the Output Core with delay 3. |
| 4 | Syndrome | One neuron fires `zero` when enabled and no s_m spikes. This is the NOR/AND of the paper. |
| 5 | Iteration Counter | `i_fb` fires every tick after start. `i_max` counts up to (MAX_ITER − 1)·2 + 4 = 202 and then fires. |
| 6 | OR | Relays `zero`, and fires `done` on zero OR i_max. |
| 7 | Output | Forwards zero, done, and x'_n AND done off the east edge, on axons 0, 1 and 2..9. |

An enable token passes between the VNU and CNU cores, so one GaB iteration
takes two ticks. The VNU core produces a new decision x' every tick. The
Parity core, Syndrome core and OR core then check it on its way to the output.

### Timing seen by the host

Count ticks from the one in which the host's `en` and `r` spikes are used
(tick 1):

* **Already a codeword.** `zero` and `done` arrive in tick 6.
* **Corrected in iteration *i*.** They arrive in tick 6 + 2i. The paper's
  example r = 10001100 (r0 first) becomes 10001101 in tick 8.
* **Never meets the checks.** The iteration counter raises `done` without
  `zero` in tick 2·MAX_ITER + 5 (tick 205 by default). The word that comes
  with it is the decision of iteration MAX_ITER − 1. This is because the
  decisions in odd ticks lag those in even ticks by one iteration. A
  consequence is that MAX_ITER = 1 returns an all-zero word on this path;
  use MAX_ITER ≥ 2.

### Host procedure for one word

1. Hold `run` low.
2. Send `en` (axon 1) and a spike on axon 2+n for every r_n = 1, all with
   delay 1.
3. Raise `run`.
4. Take the result at the first `done`.
5. Reset the decoder: send `rst_in` (axon 0) once with delay 1 and once with
   delay 2. This gives a reset in two consecutive ticks, which is needed to
   catch the enable token wherever it is.
6. Let the array run about ten more ticks so that the remaining spikes die
   out before the next word.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| ROWS, COLS | 5, 5 | mesh size (the paper evaluates 5×5 and 5×3; the decoder needs 8 cores) |
| NUM_AXONS, NUM_NEURONS | 256, 256 | core size (the decoder needs ≥ 27 axons and ≥ 26 neurons) |
| NUM_SLOTS | 16 | scheduler depth, maximum delay 15 |
| FIFO_DEPTH | 4 | router input FIFO depth |
| MAX_ITER | 100 | GaB iteration limit, 1..126 |

Shared types and widths are in `ranc_pkg`. The decoder's core numbers, axon
layouts and per-neuron parameters are functions in `gab_map_pkg`. The loader
evaluates these functions for each core and neuron, so the configuration
follows the parameters.

## Where this design departs from the paper, or fills gaps

* **Host link.** The FPGA platform's AXI4 link is replaced by plain valid
  ports. It is also not designed in the paper.
* **Not given by the paper.** The following are this design's choices:
  * the operand widths;
  * routing order, FIFOs and arbitration;
  * the scheduler size;
  * how the tick is produced;
  * the grid positions of the eight cores;
  * the axon and neuron numbering inside each core.
* **Parity delay.** The paper gives a 2-tick delay on the Parity core's x'
  relays. Here it is 3, because a spike sent in tick *t* is used in tick
  *t + 1* and the word must reach the Output core in the same tick as
  `done`.
* **Output core.** As in the paper, it ANDs each x'_n with `done`, so the
  word appears only together with `done`. This design adds a neuron that
  also forwards `done` itself, so the host sees the iteration-limit case,
  where `zero` stays silent.
* **Reset and tick counts.** The enable token keeps circulating until reset,
  which is why reset is sent in two consecutive ticks. Consequently, the
  per-word tick counts differ from the paper's dataset totals: 59,042 ticks
  for 288 words with XOR neurons.
* **Larger code.** The 1296-bit code the paper estimates at 63 cores is not
  configured. Only the 8-bit code's tables exist.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`:

| testbench | what it checks |
|-----------|----------------|
| `tb_neuron_block` | 2,000 random LIF/XOR neurons against a bit-level model; threshold equalities; positive-reset priority; XOR truth table; wrap-around; NP hold |
| `tb_core_sram` | all read ports against a shadow copy; potential write-back; configuration priority |
| `tb_scheduler` | 20,000 cycles of random writes and ticks against a per-tick model, including same-cycle write and tick |
| `tb_spike_fifo` | queue model; full/empty flags; simultaneous push and pop |
| `tb_router` | per-packet output port and offset; ordering; one-cycle latency; fairness; drain |
| `tb_tick_generator` | tick period, and gating by run, core done and network idle |
| `tb_neuromorphic_core` | 60 ticks of a random 16×8 core against a tick model (packets and potentials); NUM_NEURONS·NUM_AXONS + 1 clocks per tick; stalls |
| `tb_ranc_grid` | 2×3 grid of relay neurons against a tick-level model of delivery, delays, east-edge output and dropped packets |
| `tb_gab_config_loader` | full-size loader; every entry written once; iteration-counter table; the Tanner graph traced through the configured destinations against H |
| `tb_gab_decoder` | the whole dataset of 32 codewords and 256 single-bit-error words on a 3×3 grid of 32×32 cores with MAX_ITER = 4, against an independent GaB model (`gab_ref_pkg`) for word, zero flag and tick; counts XOR spikes, delayed relays, votes, convergence at iteration 0, correction, and the iteration limit |
| `tb_gab_decoder_full` | the top at its defaults: the paper's example, a codeword, and a word that reaches the iteration limit (tick 205); a few minutes of simulation |

To simulate with Verilator, list the packages first. For example:

```
verilator --binary --timing --assert --top-module tb_gab_decoder \
  rtl/ranc_pkg.sv rtl/gab_map_pkg.sv rtl/spike_fifo.sv rtl/router.sv \
  rtl/neuron_block.sv rtl/core_sram.sv rtl/scheduler.sv rtl/core_controller.sv \
  rtl/neuromorphic_core.sv rtl/tick_generator.sv rtl/ranc_grid.sv \
  rtl/gab_config_loader.sv rtl/gab_decoder.sv \
  tb/gab_ref_pkg.sv tb/tb_gab_decoder.sv
./obj_dir/Vtb_gab_decoder
```

At the defaults the design synthesises in Yosys to about 29,000 cells,
112,000 flip-flop bits and 2.4 Mbit of core memory. Most of the flip-flops
are the 25 schedulers (16 × 256 bits each).
