# An evolvable, unclocked LUT network (RPU) in SystemVerilog

A few hundred FPGA look-up tables wired into random loops, with no clock
anywhere in the loops, behave less like digital logic than like a small
analog dynamical system: signals race around the loops, settle, ring or
oscillate, and the pattern depends on the inputs. Such a network can serve
as the "reservoir" of a reservoir computer. The usual way to train one is to
leave the network alone and fit a classifier to its outputs. The approach
implemented here goes further and trains the network itself. Every node is a
*reconfigurable* 5-input LUT, whose 32-bit truth table can be rewritten in a
fraction of a microsecond without rebuilding the FPGA. An evolutionary
algorithm on a host computer then breeds truth tables: it scores a
population of networks on a task, keeps the best as parents, and crosses and
mutates them into the next generation. The topology never changes; only the
node functions evolve.

This RTL is the FPGA side of that system, sized as in the published
image-classification experiment ("Using evolutionary computation to optimize
task performance of unclocked, recurrent Boolean circuits in FPGAs",
Norman-Tenazas et al.). The network has 100 LUTs, 32 input bits and 10 output
LUTs. Each input vector is held for 32 cycles of a 100 MHz sample clock
(3.125 MHz, one vector every 0.32 us), and batches hold 2000 vectors. The
network's output is the *recurrent processing unit* (RPU) answer: the output
LUT that was high most often while the vector was shown. The raw samples are
also kept for a back-end classifier (the "RPU-RC" mode). The evolutionary
algorithm and any back-end classifier run in software on the host and are
not part of this RTL.

## One evaluation, step by step

The host evaluates one candidate network (one *genome*: 100 truth tables of
32 bits) like this, through the plain-signal port of `rpu_top`:

1. **Write the genome.** Send one word per LUT (`cfg_wr_en`, `cfg_wr_addr`,
   `cfg_wr_data`), then pulse `cfg_load`. All 100 LUTs shift their new table
   in at the same time, one bit per clock, MSB first. `cfg_busy` stays high
   for exactly 32 cycles, so the network changes function 0.32 us after the
   load pulse. `cfg_done` pulses when the load is finished.
2. **Write the batch.** Write up to 2000 input vectors of 32 bits
   (`in_wr_*`).
3. **Run.** Pulse `run_start` with `run_num_vec` and `run_hold`, the
   number of 100 MHz cycles each vector is held: 32 for image
   classification, 16 for the N-back memory task. The first vector reaches
   the network 3 cycles after the start pulse, and then the vectors follow one
   another with no gap. `run_done` pulses `num_vec*hold + 4` cycles after the
   cycle in which start was taken. A full image batch takes 64,004 cycles,
   0.64 ms.
4. **Read the results**, one word per vector, each with a one-cycle read
   latency:
   * `cap_rd_data`: the *capture record*, `N_OUT*SAMPLES` = 320 bits. Bit
     `o*32 + p` is output LUT `o` at sample `p` of the presentation. When
     `hold < 32`, the unused bits are 0. This is the feature vector for a
     back-end classifier.
   * `res_rd_data`: the *readout word*, `{class, ones[9..0], trans[9..0]}`,
     124 bits. Here `ones[o]` counts the samples in which output `o` was 1
     (the average output times the number of samples), and `trans[o]` counts
     the 0→1 and 1→0 changes between consecutive samples of the window.
     `class` is the output with the most ones; on a tie the lowest index
     wins. `trans[o]` sits in bits `[o*6 +: 6]`, `ones[o]` in
     `[(10+o)*6 +: 6]`, and `class` in the top 4 bits.

The host turns these into a fitness score (classification accuracy, a
correlation, a memory score) and breeds the next generation. In the original
experiments: a population of 100, the 20 best as parents, and the top 4
copied unchanged. A child takes each LUT's whole table from one of two
randomly chosen parents, and then every bit flips with probability 0.0033.
Only the genome passes between host and fabric, so one build of the RTL
serves every generation.

Interlocks: a `cfg_load` during a run and a `run_start` during a load or a
run are ignored. A genome therefore never changes in the middle of a batch,
and an assertion in `rpu_top` checks this.

## The network (`reservoir`, `cfglut5`)

`cfglut5` is one node. It holds a 32-bit shift register for the truth table
(`cdi`, `ce`, `clk`; `cdo` is the bit shifted out) and does a purely
combinational look-up: `o6 = table[i]`, and `o5 = table[i[3:0]]`. This is the
behaviour of the Xilinx 7-series `CFGLUT5` primitive, written as plain logic.
On such a device a synthesis flow can map it onto the primitive.

`reservoir` instantiates `N_LUT` nodes and wires them by a topology that is
random but fixed. The topology is computed at elaboration time from `SEED` by
the functions in `rpu_pkg`:

* LUT `j < N_IN` receives network input bit `j` on pin 0. Each input bit
  therefore drives exactly one LUT, and it drives only one of that LUT's
  pins.
* The last `N_OUT` LUTs are the outputs `y`. They receive no input bit.
* Every other pin of every LUT is driven by the output of LUT
  `mix32(SEED ^ mix32(8*j + p + 1)) mod N_LUT`, where `mix32` is the
  MurmurHash3 32-bit finaliser. Self-loops and multiple edges are allowed.
  All pins are connected.

The three rules come from the original design. The hash, the LUT numbering
and the choice of pin 0 are this implementation's own. To get a different
random network, change `SEED`. A testbench can recompute any connection with
`rpu_pkg::src_lut` and `rpu_pkg::pin_is_input`.

There is no register anywhere inside the network. Lint and synthesis tools
report the loops as combinational loops, and that is intended: the loops are
the computing substrate. To place this on an FPGA, the loops must survive
the flow. Keep the hierarchy, mark the nets so they are not optimised away,
and do not let timing analysis treat the loops as errors. Because of the
loops, the network does not do the same thing on two boards, or on two
place-and-route runs. The evolved genome is tuned to the physical circuit it
was evolved on.

## Simulating something that has no clock

In a zero-delay simulator, a combinational loop either settles at once or
never converges. To make the network simulate, each node's output carries a
propagation delay (`cfglut5.DELAY_PS`). `reservoir` gives LUT `j` a fixed
delay of 400–1399 ps from `rpu_pkg::node_delay_ps`. Synthesis ignores these
delays, and in simulation they stand in for the real LUT and routing delays.
The delay is applied to the looked-up value, not to the address, so a LUT
wired back onto itself as an inverter toggles exactly once per its own delay;
`tb_reservoir` checks this for every self-loop of the default topology. The
simulated network therefore does show the behaviour that matters. A
static input can produce outputs that keep toggling, and different inputs
settle into different patterns. Transition counts and class decisions come
out of those dynamics just as they would on hardware.

The simulation is still only a caricature of the hardware. It uses two
states and exact, constant delays, and it models no noise, no glitch
filtering and no metastability. The hardware gives slightly different
traces for repeated identical inputs; the simulation repeats itself exactly.
Do not expect a genome evolved on a board to reproduce its accuracy in
simulation, or the reverse. The testbenches therefore check the datapath
exactly in two ways. They use genomes whose behaviour is known (copies and
constants, which settle within two node delays). With random genomes, they
check that the readout agrees bit for bit with the raw samples.

Simulation speed depends on the dynamics. A settled network costs almost
nothing. A random genome that oscillates costs roughly 0.13 s of wall time
per microsecond of network time with verilator: one full 2000-vector batch
takes a few minutes.

## From asynchronous outputs to numbers (`adc_sampler`, `sample_capture`, `rpu_readout`)

The output LUTs are sampled on every 100 MHz edge, which acts as a 1-bit ADC.
Since they can change at any instant, they first pass through a 2-flop
synchronizer (`SYNC_STAGES`).

The hard part is alignment. `input_sequencer` drives the vector from a
register and emits, in the same cycle, a `sample_tag_t`. The tag says which
vector is shown, which cycle of its presentation this is, and whether this
is the first or last cycle of the vector or of the batch. `adc_sampler`
delays the tag through as many stages as the samples, so a sample and its
tag always refer to the same presentation cycle. The sample for cycle `c` is
the network's state just before the clock edge that ends `c`. The 32 samples
of a vector therefore cover its whole 0.32 us presentation, and none of the
next vector's.

`sample_capture` and `rpu_readout` both consume the aligned stream. Each
produces its word in the last cycle of a vector, including that cycle's
sample, and the word is written straight into its 2000-entry buffer
(`sdp_ram`). In the original system all samples went to the host, and the
averaging, arg-max and transition counting were done in software. Here they
run in the fabric as well, so for the plain RPU mode the host only needs the
readout word, while the capture record is still available for a back-end
classifier.

## Module map

| file | role |
|---|---|
| `rpu_pkg.sv` | default sizes, `sample_tag_t`, topology and delay functions |
| `cfglut5.sv` | reconfigurable 5-input LUT node |
| `reservoir.sv` | unclocked network of `N_LUT` nodes |
| `lut_config_loader.sv` | genome store and 32-cycle parallel loader |
| `input_sequencer.sv` | presents the batch, `hold` cycles per vector, emits tags |
| `adc_sampler.sv` | 1-bit sampling of the outputs, synchronizer, tag alignment |
| `sample_capture.sv` | 320-bit record per vector |
| `rpu_readout.sv` | ones and transition counts per output, predicted class |
| `sdp_ram.sv` | simple dual-port RAM for the three batch buffers |
| `rpu_top.sv` | everything wired together, with the host port |

Parameters of `rpu_top` and their defaults: `N_LUT=100`, `N_IN=32`,
`N_OUT=10`, `SAMPLES=32` (the longest hold, and the record width per
output), `DEPTH=2000`, `SEED=32'h5EED_0001` and `SYNC_STAGES=2`. The first
five are the sizes of the image experiment. The rest are this design's
choices. Widths follow from them: `res_rd_data` is
`$clog2(N_OUT) + 2*N_OUT*$clog2(SAMPLES+1)` bits.

## The three tasks and how they map onto this RTL

* **Image classification**: MNIST digits reduced offline to 32 bits,
  with 100 LUTs and 10 outputs. Run it at `run_hold=32`. The readout `class`
  is the RPU prediction, and the 320-bit record feeds a logistic-regression
  back end. These are exactly the defaults.
* **Digital-to-frequency**: a 4-bit number is held static, and a single
  output should toggle faster for larger numbers. The fitness is the
  correlation between the number and the output's transition rate. The
  original network had 24 LUTs, 4 inputs and 1 output. Build it as
  `rpu_top #(.N_LUT(24), .N_IN(4), .N_OUT(1))`; the 100-LUT default can
  also run the task using 4 of its inputs and 1 output. The transition
  counts come from `trans[0]`. A window is at most 32 samples, so for
  longer presentations, repeat the same vector and add up the counts.
  (Pairs across a vector boundary are not counted.)
* **N-back memory (N=3)**: a bit stream is shown for 16 samples per bit
  (`run_hold=16`) on a 100-LUT network, and the output should repeat the
  input from three bits earlier. The average output per bit is
  `ones[0]/16`. The memory lives only in the network's loops and delays.
  There is no storage for it in the RTL.

## Where this RTL departs from, or adds to, the original

* The host bus (on the original board, the Zynq processor system) is
  replaced by plain ports. The batch, sample and result buffers are on-chip
  RAMs sized for one batch. The averaging, arg-max and transition counting
  are done in hardware.
* All LUTs load in parallel, one serial line each, so a load takes 32
  cycles. The original only states that a LUT updates in under a
  microsecond.
* The 2-flop synchronizer, the one-clock design, the interlocks, the
  3-cycle start latency, the tie-break, the window boundaries for
  transition counts, the minimum hold of 2 cycles and the record layout are
  all this design's choices.
* The random topology is generated here. The original's actual network,
  its placement and its delays are unknown, so no result of the original
  can be reproduced in simulation.
* Not included: the evolutionary algorithm, the back-end classifier, and
  the reduction of MNIST images to 32 bits. All three are host software.

## Running the testbenches

Each testbench is self-checking, prints `TB_RESULT checks=N failures=M` and
stops itself through a watchdog. With verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv -Irtl rtl/rpu_pkg.sv tb/tb_rpu_top.sv \
    --top-module tb_rpu_top
./obj_dir/Vtb_rpu_top
```

`--timing` is required, because the node delays are what make the network
simulate. Substitute any testbench:

* `tb_cfglut5`, `tb_reservoir`, `tb_lut_config_loader`, `tb_sdp_ram`,
  `tb_input_sequencer`, `tb_adc_sampler`, `tb_sample_capture` and
  `tb_rpu_readout` test one module each.
* `tb_rpu_top` runs the whole design at its default sizes. It covers a full
  2000-vector batch with a known-logic genome, the 16-cycle mode, both
  interlocks, a shorter batch with a random genome, and a child genome made
  by crossover and mutation. It takes about 30 s.
* `tb_rpu_top_full` runs the same sequence with full batches throughout and
  takes about 5 minutes.
* `tb_workload_d2f` (a 24-LUT build) and `tb_workload_nback` (default
  build, 16 cycles per bit) run the flows of the digital-to-frequency and
  N-back tasks on randomly initialised networks. They compute the fitness
  measures the way a host would: the Pearson correlation, and the fraction
  of bits recalled. A random genome scores near chance on both.
