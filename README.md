# ReckOn-style spiking recurrent network processor with on-chip learning

This is synthesizable SystemVerilog for a small processor that runs a
spiking recurrent neural network (RNN) one timestep at a time and trains it
on chip, while it runs. The architecture follows the chip described in
"ReckOn: A 28nm Sub-mm2 Task-Agnostic Spiking Recurrent Neural Network
Processor Enabling On-Chip Learning over Second-Long Timescales" (Frenkel and
Indiveri). This RTL was written from that description. It is not the
authors' code. Where the description is silent, the choices made here are
listed in the last sections.

The main idea is about memory. Training a recurrent network with
backpropagation through time means storing the whole activity history,
which a chip with a few hundred kB cannot do for sequences of thousands of
steps. This design uses a simplified form of *eligibility propagation*
(e-prop). Each weight change is a product of two parts:

* a **pre-synaptic eligibility trace (ET)**: a low-pass-filtered copy of the
  input neuron's spikes;
* **post-synaptic terms**: a learning signal (the output error sent back
  through the output weights) and a surrogate derivative of the spike
  function (the straight-through estimator, STE).

For leaky integrate-and-fire (LIF) neurons the trace depends only on the
pre-synaptic neuron. So the design stores **one trace per neuron, not one
per synapse**, next to the neuron's membrane potential. Learning then costs
three small counters per neuron. If the leak time constant is made long
(alpha close to 1), the traces can span seconds.

## The network

| | size | storage |
|---|---|---|
| inputs `x` | 256 channels, address events | 256-bit input activity map |
| hidden layer | up to 256 LIF neurons, all-to-all input and recurrent connections | W_inp and W_rec: 256 x 256 x 8 bit each (64 kB each) |
| outputs `y` | up to 16 leaky integrators (LI), optional hard sigmoid | W_out: 16 x 256 x 8 bit (8 kB memory, half used) |
| neuron state | u (16 bit), tr_inp (12), tr_rec (12), tr_out (10) per neuron; threshold theta (16) and leak alpha (12) per pair | 128 x 128 bit (2 kB) |

In each timestep `t`, for each hidden neuron `j < N` (`N` = `n_neur`,
set at run time):

```
u_j   += sum_{i: x_i} (w_inp[j][i] << sh_inp) + sum_{i: z_i} (w_rec[j][i] << sh_rec) [+ noise]
tr_inp_j += 1 << inc_inp   if x_j        (input channel j was active)
tr_rec_j += 1 << inc_rec   if z_j        (neuron j spiked last step)
tr_out_j += 1 << inc_out   if z_j
spike_j = (u_j - theta > 0);  if spike_j: u_j -= theta      (reset by subtraction)
u_j, tr_inp_j, tr_rec_j *= alpha/4096 ;  tr_out_j *= kappa/256  (stochastic rounding)
y_k    = y_k * kappa/256 + sum_{j: spike_j} (w_out[k][j] << sh_out)
```

All additions saturate. *Stochastic rounding* means that a product keeps its
integer part and gains one when its fractional part is larger than a
pseudo-random number. Small values therefore still decay on average, and
rounding adds no bias.

Outputs can pass an optional hard sigmoid, `clamp(y + 128, 0, 256)`, where
256 stands for 1.0. For regression the readout is one chosen output, step by
step. For classification it is the index of the output with the highest
average since the sample began. The hardware keeps a 32-bit running sum of
each output for this. The sums all cover the same number of steps, so the
largest sum marks the largest average. The decision is valid after every
step, so a host may stop a sample early and trade accuracy for latency.

## One timestep, cycle by cycle

`controller` runs the timestep. A pulse on `step_req` starts one (a pulse
that arrives while busy is kept, one deep). The time base is therefore set
from outside: a host can step in real time or as fast as the chip allows.

1. **Swap** (1 cycle). The input map filled by the address-event decoder
   during the previous step and the spike map filled by the previous firing
   pass become the current maps `x` and `z`. New events go to fresh maps.
2. **Integration** (1 + N(1+S) cycles, S = number of set bits of `x|z`).
   Each neuron j takes one cycle for its noise and trace increments. It then
   takes one cycle per active index i, found by a priority encoder
   (`first_set`). In that cycle the W_inp and W_rec words holding
   `w[j..j+15][i]`, read in the previous cycle, arrive. The byte for j is
   added if `x_i` or `z_i` is set. Silent inputs and neurons cost nothing:
   this is how the design uses sparsity. The extra leading cycle prefetches
   the first neuron word. The timestep counter advances at the end of this
   pass.
3. **Firing and decay** (1 + N cycles, plus 1 to drain). Each neuron is
   tested, reset and decayed in one cycle, and its spike goes into the next
   `z` map. For a spiking neuron the W_out word j (its 16 output weights) is
   read and added to all 16 outputs in the next cycle. The leading cycle
   decays the outputs by kappa. In the drain cycle the final outputs are
   added to their running sums.
4. **Learning** (optional, N(N+16)/8 + 3 cycles). This runs when the `learn`
   flag is set and the `sup_valid` pin was high at the end of the forward
   pass. `sup_valid` lets the host supervise only some steps, for example
   only the decision window of a delayed-reward task.

A forward-only step thus takes exactly `N(1+S) + N + 5` cycles. The
testbenches check this.

**Neuron word pairing.** Two neurons share one 128-bit word. The word is read
once for the even neuron and held in a register while the even and then the
odd neuron go through two `lif_neuron` instances. It is written back after
the odd neuron (or after the last neuron when N is odd). The next word is
read in the same cycle as that write, so the neuron memory model has
separate read and write ports.

## The learning step

The weight changes, for output k, post-synaptic hidden neuron j and
pre-synaptic index i:

```
err_k     = y*_k - y_k                                  (loss block; 0 for k >= n_out)
LS_j      = sat16( (sum_k w_out[k][j] * err_k) >>> 7 )  (learning signal; weights read as x/128)
STE_j     = ste_lut(u_j)                                 (5 segments, 5-bit signed values)
w_out[k][j] += stoch( err_k * tr_out_j,                 lr_out )   skipped if tr_out_j = 0
w_inp[j][i] += stoch( tr_inp_i * STE_j * LS_j + reg_j,  lr_hid )   skipped if STE_j = 0 or tr_inp_i = 0
w_rec[j][i] += stoch( tr_rec_i * STE_j * LS_j + reg_j,  lr_hid )   skipped if STE_j = 0 or tr_rec_i = 0
reg_j      = -((tr_rec_j - reg_thr) << reg_sh)  if reg_en and tr_rec_j > reg_thr, else 0
```

`stoch(d, s)` divides by `2^s`, rounds stochastically, and adds to the 8-bit
weight with saturation. The expected change therefore stays exact even when
it is much smaller than one weight step. This is what lets 8-bit weights
learn.

`weight_update` sequences the step in blocks of 16 post-synaptic neurons,
because one 128-bit memory word holds 16 weights:

* **Phase 1**, 32 cycles per block, 2 per neuron j: read W_out word j and
  the neuron word of j. Compute LS_j with 16 multipliers from the weights as
  they were before this update. Look up STE_j. Keep tr_rec_j for the
  regularizer. Write back the 16 updated output weights.
* **Phase 2**, 2N cycles per block, 2 per pre-synaptic index i: read the
  W_inp and W_rec words (i, block) and the traces of neuron i. Form 32
  updates in parallel. Write both words back.

In total this is `ceil(N/16) * (32 + 2N)` cycles, which is N(N+16)/8 for N a
multiple of 16: 8704 cycles at N = 256. The skipping conditions are what
make learning sparse. They do not shorten the step, which keeps its cycle
count fixed, but they save memory writes: a W_out word is not written when
tr_out_j = 0, and a W_inp or W_rec word is not written when all 16 of its
updates are skipped. The `mon_upd` and `mon_skip` pins give, in each phase-2
cycle, how many of the 32 hidden-weight updates were applied and how many
skipped, so the update rate can be measured. With the synthetic workloads
below, between 6% and 15% of the updates are applied.

## Memory organisation

| memory | word | holds |
|---|---|---|
| W_inp, W_rec (4096 words) | `i*16 + j/16` | byte `j%16`: weight from input/neuron i to neuron j |
| W_out (512 words) | `j` | byte `k`: weight from neuron j to output k (words 256-511 unused) |
| neuron (128 words) | `j/2` | `[49:0]` neuron 2k, `[99:50]` neuron 2k+1, `[115:100]` theta, `[127:116]` alpha |

A neuron field is `{tr_out[9:0], tr_rec[11:0], tr_inp[11:0], u[15:0]}` (LSB
on the right). alpha is used as the 16-bit factor `{alpha, 4'b0}`.

Learning costs only the traces: 34 bits per neuron, 1,088 bytes for 256
neurons, or 0.8% of the 138 kB of memory. The same network without
learning would need the same weight memories.

## Pins and configuration

* **Address events** (`aer_req`, `aer_addr[7:0]`, `aer_ack`): four-phase
  handshake, synchronised inside. Each event sets one bit of the next input
  map.
* **Timestep control**: `step_req` (pulse), `sample_clr` (pulse while idle:
  clear u, traces, maps and outputs, keep theta and alpha, and reset the
  timestep counter; N/2 + 1 cycles), `busy`, `timestep[14:0]` (saturates at
  32767).
* **Supervision**: `tgt_we`, `tgt_idx`, `tgt_val` write one 16-bit target.
  `sup_valid` enables learning for the step.
* **Results**: `decision` (class index of the highest average, or
  `y[out_sel]` in regression),
  `y_out` (all 16 outputs after the optional sigmoid).
* **Monitors**: `mon_syn` pulses in each cycle that adds one map entry's
  weights to one neuron (a synaptic operation), `mon_spk` for each hidden
  spike. `mon_upd[5:0]` and `mon_skip[5:0]` give, per
  learning cycle, the number of applied and skipped hidden-weight updates.
* **SPI** (mode 0, MSB first, sck at most clk/8): 40-bit frames
  `{rw, target[2:0], address[19:0], data[15:0]}`, with rw = 1 for a write.
  Targets: 0 parameter registers, 1 W_inp, 2 W_rec, 3 W_out, 4 neuron memory
  (byte addresses = word*16 + byte), 5 outputs (read only: address k gives
  y_k, 16 + k and 32 + k the low and high halves of its running sum). On a read, the
  data comes back on miso in the last 16 bits of the same frame. Memory
  access works only while `busy` is low. Otherwise writes are dropped and
  reads return 0.

Parameter registers (reset value in brackets):

| reg | field |
|---|---|
| 0 | `n_neur` enabled hidden neurons (256) |
| 1 | `n_out` enabled outputs (16) |
| 2 | `{sh_out, sh_rec, sh_inp}` weight shifts (4, 4, 4) |
| 3 | `{inc_out, inc_rec, inc_inp}` trace increment shifts (5, 6, 6) |
| 4 | `kappa`, output and tr_out leak /256 (243) |
| 5 | `{reg_en, learn_en, class_mode, sig_en, noise_en}` (0) |
| 6 | `noise_sh`, noise = PRNG >>> noise_sh (0) |
| 7, 8 | `lr_out`, `lr_hid` learning-rate shifts (8, 12) |
| 9, 10 | `reg_thr`, `reg_sh` regularizer (2048, 0) |
| 11-14 | STE breakpoints, signed (-512, -256, 256, 512) |
| 15, 16 | STE values `{v2,v1,v0}`, `{v4,v3}`, 5-bit signed (0, 4, 8, 4, 0) |
| 17 | `out_sel` for regression (0) |

## Source files

One module per file in `rtl/`: `reckon_pkg` (widths, word and
configuration structs), `reckon_top`, `controller`, `lif_neuron`,
`first_set`, `sparsity_map`, `aer_decoder`, `li_output`, `loss`,
`weight_update`, `ste_lut`, `stoch_update`, `prng` (16-bit LFSR),
`sram_1r1w` (memory model), `spi_slave`, `param_bank`.

## How far it follows the published chip

These parts follow the description: the block structure, the memory sizes
and the 128-bit word, the 8-bit AE decoder with four-phase handshake, 256
LIF and 16 LI neurons, the 16/12/12/10-bit state and trace widths, the
integration/firing/decay datapath (weight shift, PRNG term, `u - theta > 0`,
reset by subtraction, n x m multiplier with stochastic rounding), sparsity
maps, the pass cycle counts, two LIF instances, the weight-update dataflow
(STE LUT, 16-PE learning-signal MAC, RFs of 16x5, 16x16 and 16x12 bits,
skipping, regularizer, stochastic update), and the N(N+16)/8 learning
cycles.

These are this design's own choices, because the description does not give
them:

* The neuron-word bit layout. alpha is 12 bits: the multiplier takes 16 bits,
  but two neurons plus a 16-bit theta and a 16-bit alpha would not fit in
  128 bits.
* The SPI frame and the parameter register map. The description only names
  these blocks.
* The AER synchroniser, and the external `step_req` time base.
* The STE segment encoding (breakpoints), the hard-sigmoid scale, the
  LS >>> 7 scaling, the regularizer's exact form, and the learning-rate
  shifts.
* Saturation everywhere.
* PRNG type: one 16-bit LFSR per block, with rotated copies for parallel
  lanes.
* The running sums are 32 bits wide and saturate. Ties go to the lower
  index.
* Five overhead cycles per step: swap, two prefetches, drain, and return to
  idle.
* The 1R1W neuron memory. The real macros' port structure is unknown.
* The upper half of the 8 kB W_out memory is unused.

Not reproduced: power, frequency, area and accuracy figures. These depend on
the 28-nm macros, on the training setups and on host software, none of
which are part of this RTL. The pad ring and the external sensors are not
modelled.

Throughput, for reference: with N = 256 and a dense step (S = 256), a step
takes 66,053 cycles plus 8,707 for learning, 74,760 in all: 0.65 ms at
115 MHz or 5.8 ms at 13 MHz. The published chip gives 0.6 ms and 5.7 ms as
its worst-case real-time step at those clocks, so this RTL's cycle count is
within about 10% of the silicon. Sparse activity is what makes faster than real
time possible. The workload test below measures about 470 cycles per 1-ms
step for the 40-neuron navigation task, about 245 times faster than real
time at 115 MHz. The published chip reports 37x to 600x across its tasks at that
clock.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. References are
computed inside the testbench with plain integer arithmetic:

* `tb_lif_neuron`: 20,000 random operand sets, covering the exact
  integration, the spike boundary at u - theta = 0 and 1, decay bounds, and
  unbiased rounding.
* `tb_controller`: full timesteps against a neuron-by-neuron reference,
  checking cycle counts, spike maps, output adds, the clear pass and the
  learning hand-off.
* `tb_weight_update`: every weight after a learning step, for N = 32, 20 and
  16, against the update formulas. It also checks the cycle counts, the
  numbers of applied and skipped updates, and that only words with at least
  one applied update are written.
* `tb_reckon_top`: end to end through the pins. A 16-neuron network is
  configured over SPI and driven by address events. The test checks the
  spikes, outputs and decision of a step, every weight after a learning
  step, and SPI read-back. It then runs noise, sigmoid, regression and
  recurrent steps, and counts that each mechanism occurred.
* `tb_reckon_full`: the design at full size (256/256/16). It checks the
  spikes of all 256 neurons, the outputs, forward and learning cycle counts,
  and that weights change.
* `tb_workloads`: synthetic event streams shaped like the three target tasks,
  at the default memory size, with the network size set through the
  configuration registers:
  * delayed cue-integration navigation: 40 inputs, 40 neurons, four full
    2250-step trials with one sigmoid output, learning only in the recall
    window;
  * keyword spotting: 234 input channels, 256 neurons, 104 steps;
  * gesture recognition: 256 inputs, 256 neurons, 10 outputs, one full
    1318-step sample. After every step it checks that the decision is the
    output with the highest average so far.
  It checks every step's cycle count. It also checks that no weight is
  written before supervision starts, and that the input eligibility traces
  still tell which side had more cues after the delay. Finally it runs
  32,770 steps to check that the timestep counter stops at 32,767 and that
  learning still works there. The data are random, not the real datasets,
  so the test says nothing about accuracy. Measured speed, with learning in
  every step of the keyword and gesture samples:

  | task | step | cycles per step | at 115 MHz | faster than real time |
  |---|---|---|---|---|
  | navigation (N = 40) | 1 ms | about 470 | 4.1 us | about 245x |
  | keyword spotting (N = 256) | 5 ms | about 36,000 | 315 us | about 16x |
  | gestures (N = 256) | 5 ms | about 27,000 | 237 us | about 21x |

  The published chip reaches roughly 70x, 37x and 500x when learning on the
  real datasets at 115 MHz. The synthetic streams here keep many hidden
  neurons active, and the keyword and gesture runs learn in every step.
  With sparser activity, steps get shorter in proportion to N(1+S).
* Leaf tests: `tb_prng`, `tb_sram_1r1w`, `tb_aer_decoder`, `tb_sparsity_map`,
  `tb_ste_lut`, `tb_stoch_update`, `tb_loss`, `tb_li_output`,
  `tb_param_bank`, `tb_spi_slave`.

To simulate one, for example the full-size test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_reckon_full \
    rtl/reckon_pkg.sv $(ls rtl/*.sv | grep -v reckon_pkg) tb/tb_reckon_full.sv -o sim && obj_dir/sim
```

The package must come first. The full-size test runs in under a second, and
`tb_workloads` takes about a minute and a half.
The memories are not reset. The testbenches either load them or write them
over SPI, and they do not depend on initial values elsewhere.
