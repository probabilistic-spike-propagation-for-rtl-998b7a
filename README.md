# Probabilistic spike propagation accelerator (SystemVerilog)

In a spiking neural network most of the work, and almost all of the memory
traffic, is spike propagation: every time neuron *i* fires, each of its
*N* outgoing synapses has to be read (target index and weight) and each
target's membrane potential updated. This design reads much less. It treats a
synaptic weight as the probability that a spike crosses that synapse:

* When neuron *i* fires, draw one threshold *r* uniformly from `[0, w_max_i)`.
* Every target *j* whose weight satisfies `w_ij >= r` receives the *same*
  weight `w_max_i`; the others receive nothing.

Target *j* is then reached with probability `w_ij / w_max_i` and receives
`w_max_i` when it is, so on average it gets `w_ij` per spike. Over many
timesteps an integrate-and-fire network behaves like the deterministic one.
The gain comes from storing each neuron's outgoing list **sorted by falling
weight**. The targets reached are then always a prefix of the list, and only the
prefix length, the *termination point* `termpt`, has to be worked out. After that, only the
first `termpt` target indices are read, and no weights at all. For the
skewed weight distributions of trained networks, `termpt` is usually a small
fraction of *N*.

Excitatory and inhibitory synapses are kept as two separate sorted lists per
neuron. The inhibitory list uses the most negative weight `w_min_i` as its
applied weight and `|w_ij| / |w_min_i|` as its probability.

The RTL implements an accelerator for this scheme: spike injection, a
double-buffered spike queue, a propagation unit that gets `termpt` from a
5-segment piecewise-linear model of each sorted list, an on-chip/off-chip
split of the index lists, and an integrate-and-fire evaluation unit. It is
meant to sit beside a host processor that loads the tables, writes the input
image and reads the output spike counts.

## Data path

```
 host: pixels ──► spike_injection ──a──┐
                                       ▼
                              queue_combiner ──► propagation_unit ──updates──► evaluation_unit
                                 ▲  (2 buffers)     │      ▲                     │  potentials
                                 └──────b───────────┼──────┼─────────────────────┘  + output counts ──► host
                                                    ▼      │
                                      onc_index_mem (on chip)   off-chip memory (burst port)
```

| module | role |
|---|---|
| `psp_pkg` | shared widths, record types, configuration map |
| `uniform_rng` | xorshift32 uniform random numbers |
| `spike_injection` | pixel intensities → Bernoulli input spikes, one sweep per timestep |
| `queue_combiner` | merges injection and evaluation spikes into the next timestep's queue; serves the current one |
| `pwl_termpt` | random number → termination point through the 5-segment model |
| `propagation_unit` | per spike and polarity: descriptor, `termpt`, index streaming, updates |
| `onc_index_mem` | on-chip store of the leading part of every sorted list |
| `evaluation_unit` | membrane potentials, threshold and reset, final-layer spike counters |
| `psp_accelerator` | top level and timestep controller |

The off-chip memory and the host are outside the RTL. The top exposes them as
ports. `tb/offchip_mem_model.sv` is a behavioural DRAM model for simulation.

## Timesteps

Neurons are numbered layer by layer. Ids `0 .. n_in-1` are inputs, which are
injected and never evaluated. Ids `n_in .. n_total-1` are evaluated. Ids
`out_base .. n_total-1` are the final layer. A `start` pulse clears all
potentials and output counters (one neuron per cycle), then runs `num_steps`
timesteps. Timestep *s* is:

1. **Injection and evaluation, overlapped.** `spike_injection` sweeps the
   inputs for step *s*. At the same time, for *s* > 0, `evaluation_unit`
   sweeps the evaluated neurons to finish step *s-1*. Both write into the
   queue's *write buffer*, and a round-robin arbiter picks one per cycle
   when both are ready.
2. **Swap.** The write buffer becomes the *read buffer*, and an empty buffer takes its place.
3. **Propagation.** `propagation_unit` drains the read buffer. Its updates go
   straight into the potentials, one per cycle.

After the last timestep only the final layer is evaluated. Then `done` rises.
A neuron therefore fires at most once per timestep. Its spike takes effect in the next
timestep, so a signal crosses one layer per timestep. Because of this, a
queue of one entry per neuron can never overflow. The threshold is checked once per
timestep, after all updates, and a firing neuron is reset to 0. This is
clock-driven integrate-and-fire, as used by networks converted from ANNs.

## The termination point (`pwl_termpt`)

The exact `termpt` is the number of list entries with `|w| >= r`. A binary
search over the sorted weights would find it, but it needs random accesses to weight memory.
Instead, each list carries a piecewise-linear model of the curve
"magnitude against list position" with 5 segments. Segment *k* starts at
position `x_k` with magnitude `w_k`. The magnitudes never rise with *k*. The
segment stores the reciprocal of its slope, so no divider is needed:

```
slope_k = (x_{k+1} - x_k) / (w_k - w_{k+1})      unsigned Q16.16, positions per magnitude unit
          (last segment: x_5 = n_max, w_5 = magnitude of the last entry;
           a flat segment stores 0xFFFF_FFFF)
```

The hardware takes these steps:

```
r      = (rnd[15:0] * |w_hat|) >> 16                      stage 1
k      = last segment with w_k >= r                        stage 2 (5 parallel comparators)
termpt = min(n_max, x_k + 1 + ((w_k - r) * slope_k) >> 16)
```

Positions `0 .. x_k` all have magnitude `>= w_k >= r`, which gives the `+ 1`. At every
breakpoint the result is exact. Between breakpoints it is the count under
linear interpolation. A flat list (all weights equal) reaches its whole
list on every spike, which is the deterministic case. `n_max = 0` gives 0.
The unit has a 2-cycle latency and no stall.

The breakpoints belong to the software that prepares the network. The
testbenches use 5 segments of equal length (`psp_ref_pkg::pwl_fit`). Placing
breakpoints where the slope changes fits real distributions more closely, and
the hardware does not depend on where they are.

## Propagation and the on-chip/off-chip split

Each neuron has two *descriptors*, polarity 0 (excitatory) and polarity 1
(inhibitory):

| field | bits | meaning |
|---|---|---|
| `n_max` | 16 | list length (0: no list) |
| `w_hat` | 16 signed | applied weight: `w_max` (exc, > 0) or `w_min` (inh, < 0) |
| `onc_len` | 16 | leading positions kept on chip |
| `onc_base` | 32 | on-chip address of position 0 |
| `off_base` | 32 | off-chip address of position `onc_len` |

For each spike, `propagation_unit` handles the excitatory list and then the
inhibitory one. For each list it:

* reads the descriptor and the 5 segments (1 cycle),
* draws a random number and gets `termpt` (2 cycles, then 1 to dispatch),
* reads positions `0 .. min(termpt, onc_len)-1` from `onc_index_mem`, one per
  cycle,
* if `termpt > onc_len`, issues **one burst** of `termpt - onc_len` ids
  starting at `off_base`, and forwards them as they arrive,
* sends `(target, w_hat)` to the evaluation unit for every id.

Short lists almost always end within their on-chip part, because small positions are
reached far more often than large ones. Keeping the first 20-40 % of each list on chip removes most
off-chip traffic. The off-chip memory is expected to hold the full sorted
weights as well, for the software that builds the tables. The hardware never
reads them.

Off-chip port: `off_req_valid/ready` with `off_req_addr` (first id) and
`off_req_len` (number of ids). After acceptance, the memory returns exactly
`off_req_len` ids on `off_rvalid/off_rdata`, in order, starting no earlier than the
next cycle. There is no back-pressure on the data. Only one burst is outstanding at a time.

## Configuration map

All tables are written through `cfg_we`, `cfg_sel`, `cfg_addr` and `cfg_wdata[127:0]`:

| `cfg_sel` | `cfg_addr` | data |
|---|---|---|
| `CFG_PIXEL` (0) | input neuron | `[7:0]` intensity; the neuron spikes with probability intensity/256 per timestep |
| `CFG_DESC` (1) | `2*neuron + polarity` | `[111:0]` `desc_t` |
| `CFG_PWL` (2) | `8*(2*neuron + polarity) + segment` | `[63:0]` `pwl_seg_t` = `{w_k[15:0], x_k[15:0], slope_k[31:0]}` |
| `CFG_ONC` (3) | on-chip slot | `[15:0]` target id |

Run parameters (`n_in`, `out_base`, `n_total`, `v_th`, `num_steps`) are plain
inputs that must be held while `busy` is high. Output counts are read
combinationally through `cnt_rd_addr` → `cnt_rd_data`. Activity counters
(`st_*`) count injected spikes, re-queued spikes, propagated spikes, updates,
on-chip and off-chip index reads, bursts, early terminations, firings,
saturations and arbitration conflicts. For example, memory accesses per spike
is `(st_onc_reads + st_off_reads) / st_propagated`.

## Sizes

| parameter | default | why |
|---|---|---|
| `N_NEURONS` | 4096 | 784-1200-1200-10 fully connected MNIST network (3194 neurons) |
| `N_IN_MAX` | 1024 | 784 pixel inputs |
| `N_OUT_MAX` | 16 | 10 classes |
| `ONC_DEPTH` | 524 288 ids | about 22 % of that network's 2.39 M synapses |
| `QUEUE_DEPTH` | `N_NEURONS` | one spike per neuron per timestep |
| weights / potentials | 16 / 24 bit | signed; potentials saturate |

The fully connected MNIST network fits as a whole: 3194 neurons, lists up to
1200 long, and 22 % of its indices on chip. The convolutional MNIST and CIFAR-10 networks
the scheme was evaluated on do not fit the default sizes. Counted as one
neuron per feature-map position, they need about 50 000 and far more neurons,
and CIFAR-10 has 3072 inputs. Identifiers are 16 bits wide, so raising
`N_NEURONS` and `N_IN_MAX` extends the design up to 65 536 neurons.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with
reference values computed independently in the testbench. `psp_ref_pkg`
holds the xorshift sequence, the `r` scaling and the piecewise-linear
formula. `tb_psp_accelerator` runs the top level at its default size with
a 100-40-10 network in three parts:

* **A.** Flat lists, which are deterministic. Output counts, final potentials and
  every activity counter match a reference model of the timestep schedule.
* **B.** Quadratically falling lists. Updates per list are within 15 % of
  `sum(w)/w_max`. Index reads are below 60 % of the deterministic count (40 %
  in the run), and under 40 % of the deterministic count go off chip.
* **C.** Extreme weights and an unreachable threshold. Potentials saturate,
  and the count of saturations matches the model.

It also requires that every mechanism occurred at least once.

`tb_mnist1_workload` runs a network of the fully connected 784-1200-1200-10
MNIST shape at the default sizes for 8 timesteps. All 2.39 M target indices are
loaded, with the leading 20 % of each list on chip. Trained weights are not
part of this package. Instead, each sorted list has the synthetic magnitude
profile `m*(1-j/n)^4`, excitatory lists cover 60 % of the next layer and
inhibitory lists 40 %, and 20 % of the input pixels are bright. For every
propagated spike, the testbench adds up the exact expected termination point
and the expected off-chip reads, using all 65 536 random values for each list
shape. Measured updates and off-chip reads come within 1 % of that sum, and
index reads are about 0.22 of the deterministic count, with 0.08 of it off
chip. These numbers belong to the synthetic profile. They do not reproduce
trained weights. The run takes about 1 M cycles and a few seconds in
Verilator.

To run a testbench with Verilator 5, for example the top level:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
    rtl/psp_pkg.sv tb/psp_ref_pkg.sv tb/tb_psp_accelerator.sv \
    --top-module tb_psp_accelerator -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. The other testbenches are
`tb_uniform_rng`, `tb_spike_injection`, `tb_queue_combiner`,
`tb_pwl_termpt`, `tb_onc_index_mem`, `tb_propagation_unit` and
`tb_evaluation_unit`. Each runs in seconds.

## Where this design departs from, or adds to, the scheme

* **Only the piecewise-linear termination point is built.** The deterministic
  baseline, binary search, random-index and weight-transform alternatives are
  not. The deterministic behaviour is still available: give a list equal
  weights (or a flat model) and it is always read in full.
* **One propagation unit and one evaluation unit.** The schematic of the
  scheme shows several of each working in parallel. The accelerator here has one of each.
* The text states the propagation rule both as `w > r` and as
  `w >= r` (its scan loop and its definition of the termination point). This
  design uses `w >= r` and draws `r` from `[0, w_max)`, so the strongest
  synapse is always reached.
* Bernoulli rate coding of inputs, xorshift32 random numbers, threshold
  check once per timestep with reset to zero, saturating 24-bit potentials,
  the double-buffered queue with round-robin merging, the descriptor and
  segment records, the on-chip-prefix/off-chip-tail placement, the burst
  protocol and all widths are choices of this design.
* The PWL breakpoints, the scaling of weights and thresholds, and the
  ordering of the lists are left to the host software.
