# Time-compressed spiking neural accelerator (PTC-SNN) in SystemVerilog

A digital spiking neural network (SNN) accelerator advances its neurons one
time step per update. A sample (a spoken word, an image turned into Poisson
spike trains) often spans hundreds of time steps, so runtime and static energy
are set by the length of the spike trains. This design shortens the trains
instead of changing the network. Every `N_cmp` consecutive time steps of an
input channel are merged into **one weighted spike**, whose weight is the
number of binary spikes merged. The network then runs `N_cmp` times fewer
steps. Three things make this work without retraining or recoding the
network:

1. **Input spike compression.** One small unit per input channel turns the
   raw binary train into a weighted train. It keeps the spike count exactly.
2. **Input-output-weighted (IOW) neurons.** They accept weighted spikes and
   emit weighted spikes. A neuron whose potential jumps several thresholds in
   one compressed step sends one spike of weight *n*, not a single binary
   spike, so no information is cut off downstream.
3. **Rescaled time constants.** One compressed step stands for `N_cmp`
   original steps, so every decay (synaptic current, membrane potential,
   learning trace) must decay faster per step. The exact rescaled constant is
   generally not a power of two. The design therefore alternates between the
   two nearest powers of two, so that the time average is right. Each decay
   stays a shift-and-subtract.

The compression ratio can be programmed at run time from 1:1 to 16:1. The
network built around these parts is a liquid state machine (LSM): an input
layer of 78 channels, a fixed recurrent reservoir of 135 neurons, and a
trained, fully connected readout layer. These sizes match a speech
benchmark of 78 cochlear-filter channels. The ratio is held in a register,
so a fixed-ratio accelerator is the same design with that register never
rewritten.

## Block structure

```
 raw spikes --> [iscu x N_IN] --w_in--> [lsm_reservoir: N_RES x iow_ne] --res_w--> [readout_layer: N_OUT x iow_ne] --> out_w, out_cnt
                    ^  n_cmp                  ^ k_s, k_m (step t)                        ^ k_s, k_m (delayed 1)   ^ weight write port
                    |                         |                                          |
 ratio_cmd --> [global_comp_ctrl: 3 x (tc_lut + tc_avg)] -------------------------------+--> k_c (learning trace, exported)
```

| file | role |
|---|---|
| `rtl/tc_pkg.sv` | shared types: 5-bit spike weight, `syn_w_t` power-of-two synapse, connectivity hash |
| `rtl/iscu.sv` | input spike compression unit (SIPO demux, adder, register) |
| `rtl/tc_lut.sv` | ratio -> scaled time constant, as two powers of two plus a mix |
| `rtl/tc_avg.sv` | time-averaging sequencer: which power of two to use this step |
| `rtl/global_comp_ctrl.sv` | ratio register; one table and one sequencer each for tau_s, tau_m, tau_c |
| `rtl/iow_ne.sv` | IOW leaky integrate-and-fire neuron (synaptic unit and neural unit) |
| `rtl/iow_burst_ne.sv` | IOW neuron for burst coding |
| `rtl/lsm_reservoir.sv` | recurrent reservoir with fixed sparse random connectivity |
| `rtl/readout_layer.sv` | readout neurons, writable weights, spike-weight counters |
| `rtl/ptc_snn_top.sv` | top level |

## Weighted spikes and the compression unit

A weighted spike is an unsigned 5-bit number (`wspike_t`), 0 to 16. Zero
means no spike. The same format travels between every pair of layers.

`iscu` has two input modes.

* **Serial**: one raw bit per `s_valid`. Bit *c* of a window is steered into
  lane *c*, which is the serial-in/parallel-out demultiplexer. When bit
  `N_cmp-1` arrives, the adder sums the lanes and the arriving bit, and the
  sum is registered. For example, at 4:1 the train `1011 0001 0100 0010`
  (time order left to right) becomes `3 1 1 1`. The four lanes then hold
  `1000`, `0010`, `1001` and `1100`.
* **Parallel**: the channel presents a whole window at once in `p_in[15:0]`.
  Bit *t* is raw step *t*, and bits at or above `N_cmp` are ignored. The
  demultiplexer is bypassed and the bits are summed on `p_valid`.

`w_valid` pulses one cycle after a window completes. In the top level,
channel 0's `w_valid` is the compressed-step strobe `step_res`. An assertion
checks that all channels stay in lockstep. The published unit clocks its
demultiplexer `N_cmp` times faster than its output register. This design
uses a single clock with strobes instead. In parallel mode the network then
does one compressed step per clock. In serial mode it does one step per
`N_cmp` clocks, as the serial bits arrive.

## The IOW leaky integrate-and-fire neuron

Synaptic weights are restricted to `+/-2^k` (`syn_w_t = {en, neg, k[2:0]}`).
The product of a spike weight and a synaptic weight is therefore a left
shift. In one compressed step:

```
SP'  = SP - (SP >>> k_s) + sum_i  +/-(w_i << k_i)          synaptic unit
V    = Vm - (Vm >>> k_m) + SP'                              neural unit
n    = largest n in 1..16 with V >= n*U_TH, else 0          comparator bank
Vm'  = V - n*U_TH ;  w_out = n
```

The comparator bank replaces the single threshold comparator of a binary
neuron. It is what keeps information when a compressed step drives the
potential two or three thresholds high: the neuron sends one spike of weight
2 or 3 and subtracts that many thresholds. A binary-output neuron would send
a single spike and lose the rest. The weight cap of 16 equals the largest
compression ratio. Arithmetic saturates at `ACC_W` = 24 bits.

## Burst-coding variant (`BURST = 1`)

In burst coding each neuron has a burst function *g*. After a step in which
the neuron fired a spike of weight *w*, *g* is multiplied by `beta^w`. After a
silent step it returns to 1. The neuron's thresholds become `n*g*u_th`, and
its spikes carry the amplitude *g* to their targets. A target adds
`((w_i * g_i * u_th) >> 8) << k_i` directly to its membrane, because this
variant uses a zero-order synapse with no SP register. `beta^w` comes from a
17-entry table built at elaboration. *g* is unsigned fixed point with 8
fractional bits and saturates at 255.996. `beta` defaults to 2.0. Setting
`BURST = 1` on the top, reservoir or readout builds these neurons instead of
`iow_ne`. The parameter `g_res` then carries each reservoir neuron's
amplitude to the next layer.

## Time-constant scaling and time averaging

This is the subtle part of the design. A first-order decay with nominal
time constant `tau = 2^K` steps, `x <- x - x/tau`, becomes
`x <- x (1 - 1/tau)^g` over one step compressed by *g*. The time constant
to apply per compressed step is therefore

```
tau_c = 1 / (1 - (1 - 2^-K)^g)
```

The naive value `tau/g` is noticeably wrong for large *g*. `tc_lut`
evaluates the formula for every ratio at elaboration, in 24-bit fixed point.
It repeats the hardware's own shift-and-subtract decay *g* times and takes
the reciprocal of one minus the result. It stores `k_lo = floor(log2 tau_c)`
and `n_hi = round(16 * (tau_c / 2^k_lo - 1))`. `tc_avg` then uses shift
`k_lo + 1` in `n_hi` of every 16 steps and `k_lo` otherwise. The time
average of the constant, `2^k_lo * (1 + n_hi/16)`, thus equals `tau_c` to
within 1/32 of `2^k_lo`. A phase accumulator spreads the larger constant
evenly: for 4 and 8 averaged to 5, the pattern is 4, 4, 4, 8, repeating.

Values at the default nominal constants (tau_s = 8, tau_m = 32, tau_c = 64):

| ratio | tau_s,c (exact / realised) | tau_m,c | tau_c,c |
|---|---|---|---|
| 1 | 8 / 8 | 32 / 32 | 64 / 64 |
| 2 | 4.27 / 4.25 | 16.25 / 16 | 32.25 / 32 |
| 3 | 3.03 / 3.00 | 11.01 / 11.00 | 21.67 / 22.00 |
| 4 | 2.42 / 2.38 | 8.38 / 8.50 | 16.38 / 16 |
| 8 | 1.52 / 1.50 | 4.46 / 4.50 | 8.45 / 8.50 |
| 16 | 1.13 / 1.12 | 2.51 / 2.50 | 4.49 / 4.50 |

All neurons share the same constants. One controller (`global_comp_ctrl`)
therefore holds one table and one sequencer per time constant and
broadcasts the shifts `k_s`, `k_m` and `k_c`, instead of a table in every
neuron. `k_c` is the learning-trace constant. It is exported for a training
engine, which is not part of this RTL.

## Network, timing and interface of `ptc_snn_top`

* `ratio_cmd`/`ratio_we` load the ratio. A command of 0 reads as 1, and
  values above 16 read as 16. Loading a ratio restarts the averaging
  patterns.
* `clear` starts a sample. It zeroes all neuron state, the readout counters
  and the serial windows.
* Cycle *t*: a window is accepted. Cycle *t+1*: `step_res` is high, and the
  reservoir consumes the compressed inputs and its own spikes from the
  previous step. Cycle *t+2*: `step_out` is high, and the readout consumes
  the reservoir spikes of step *t+1* with the same time-constant shifts.
  In parallel mode, a sample of *T* raw steps at ratio *g* takes exactly
  `ceil(T/g)` compressed steps and `ceil(T/g) + 2` cycles.
* The reservoir connectivity is fixed, sparse and random, derived from
  `SEED` by an integer hash (`tc_pkg::syn_hash`):
  * each input reaches a reservoir neuron with probability 32/256;
  * reservoir neurons connect with probability 26/256, without self loops;
  * 20 % of reservoir neurons are inhibitory;
  * weights are `2^0..2^3` for input synapses and `2^0..2^2` for recurrent
    ones.

  The constants are baked in, and unused synapses vanish in synthesis.
* The readout weights are a register array, written through
  `wr_en/wr_row/wr_col/wr_data`. `out_cnt[j]` sums the weights of readout
  neuron *j*'s spikes since `clear`. The largest count is the class decision.
* The ports a training engine would use are `res_w`, `out_w`, `k_c` and the
  weight write port.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_IN` | 78 | input channels (one `iscu` each) |
| `N_RES` | 135 | reservoir neurons |
| `N_OUT` | 26 | readout neurons (one per class; this design's choice) |
| `BURST` | 0 | 1 = burst-coding neurons |
| `K_S_NOM`, `K_M_NOM`, `K_C_NOM` | 3, 5, 6 | nominal time constants 2^K (this design's choice) |
| `U_TH` | 64 | firing threshold (this design's choice) |
| `SEED` | 0x12345678 | reservoir connectivity |
| `CNT_W` | 16 | readout counter width |

Other sizes of the same network family fit by parameter:

* 225 inputs and 18 classes for 15x15-pixel images;
* 64 inputs, 300 reservoir neurons and 10 classes for spoken digits.

## Where this RTL departs from the published design or fills gaps

* The training engine (a supervised spike-based rule with a calcium trace
  and a random number generator) is not included. Its interface is exported
  as described above.
* **Synapse order.** The text mentions a second-order synaptic model. The
  neuron block diagram shows one synaptic state register, and this RTL
  follows the diagram.
* **SP-to-membrane gain.** No extra gain of *g* is applied when SP feeds the
  membrane. As a result, the charge one input spike delivers shrinks with
  the faster synaptic decay at high ratios. The block diagram shows no such
  gain either.
* **Shared time-constant tables.** They sit in the global controller, not in
  every neuron, as the text allows.
* **Burst function.** The burst function belongs to the firing (presynaptic)
  neuron and travels with its spike. The exponent of `beta` is the weight of
  the spike fired in the previous step.
* **Values chosen here.** The following are not published and were chosen
  for this design:
  * all time constants, the threshold and the word widths;
  * the reservoir statistics and the value of beta;
  * the 16-step averaging period;
  * the single-clock input strobes;
  * the readout counters.

## Simulating

Each testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and includes a watchdog. The testbenches
compare the RTL against reference models written independently in the
testbench: integer models of the neurons that compute the output weight by
division rather than by a comparator bank, and a floating-point evaluation
of the time-constant formula.

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/tc_pkg.sv tb/tb_ptc_snn_top.sv --top-module tb_ptc_snn_top -o sim
./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_iscu` | the 4:1 example above; random serial and parallel windows at every ratio; exact spike-count preservation |
| `tb_tc_lut` | table against the floating-point formula for tau = 8, 32 and 64 at every ratio |
| `tb_tc_avg` | the 4,4,4,8 example; high-step counts and averages for all `k_lo`/`n_hi` |
| `tb_global_comp_ctrl` | clamping of ratio commands; averaged tau_s/tau_m/tau_c against the formula |
| `tb_iow_ne`, `tb_iow_burst_ne` | 3000 random steps against the reference neuron; multi-threshold spikes and bursts must occur |
| `tb_lsm_reservoir` | LIF and burst reservoirs (4 inputs, 8 neurons) against a reference network |
| `tb_readout_layer` | weight writes and rewrites; spikes and counters against the reference |
| `tb_ptc_snn_top` | the whole network at 4/10/3; seven ratios; both input modes; full reference model; exact step and cycle counts; equal results from serial and parallel input |
| `tb_ptc_snn_full` | the same at the default 78/135/26 size, ratios 1, 4 and 16 (about one minute including the build) |
| `tb_ptc_snn_workloads` | the same reference-model check at the sizes of the two other evaluated data sets: 225/135/18 (15x15-pixel images, 18 classes) and 64/300/10 (spoken digits, 10 classes), ratios 1 and 16; about three minutes including the build |
| `tb_ptc_snn_burst` | the whole network built with burst neurons (BURST = 1) at 6/12/4; ratios 1 to 16 in both input modes; step and cycle counts, preserved input spike counts, readout sums, equal serial and parallel results, and that bursts occur |

`tb_ptc_size_run` is not a test of its own: it is the sized run that
`tb_ptc_snn_workloads` instantiates once per network size.

`tb_ptc_snn_top` also counts that each mechanism occurs at least once:

* a ratio change;
* both input modes;
* a weighted input spike and a weighted reservoir spike;
* a time-averaged step;
* a weight write;
* a clear.
