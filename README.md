# ProWAFT in RTL: a workload-aware selective-TMR controller for a partially reconfigurable CNN accelerator

An SRAM-based FPGA running CNN inference is exposed to single-event upsets
in its configuration memory. Triplicating everything (TMR) all the time
masks those upsets, but costs throughput and energy. Running without
protection is cheap, but silently wrong when the upset rate is high. ProWAFT
treats protection as a decision taken again before every layer. The fabric is
split into K = 6 reconfigurable partitions. Each one can hold a baseline or a
triplicated version of a convolution, pooling or batch-norm kernel. Before
each workload, a controller scores every candidate configuration of the
partitions on three things:

* expected latency and energy;
* a reliability risk, which combines how fault-sensitive the layer is, the
  current per-partition upset probability and how far an error would
  propagate;
* the cost of the partial reconfiguration (PR) needed to get there.

It then switches to the cheapest candidate that the remaining PR budget
allows.

This repository holds synthesizable SystemVerilog for that system:

* the decision pipeline: criticality score, risk model, performance model,
  PR cost, budget and argmin;
* a partition model with baseline and TMR variants, configuration frames,
  upset injection and parity detection;
* the three accelerator kernels;
* a PR sequencer.

The method is the one the ProWAFT paper describes. The hardware structure,
number formats and interfaces are this design's own wherever the method
leaves them open. The list of such choices is below.

## Block structure

```
                 host writes                      workload descriptor, p_fault[K]
                     |                                       |
               +-----v------+       +------------------------v---------------------+
               |param_tables|======>|               policy_engine                  |
               |  globals   |       |  wcs_unit -> perf_model, rrs_unit,           |
               |  WCS LUT   |       |  pr_overhead (per candidate) -> J, argmin     |
               |  candidates|       |  recip_divider (normalisation), PR budget     |
               +-----+------+       +-------------------+--------------------------+
                     |                                  | dec_cand, dec_reconfig
                     |  kernel params          +--------v--------+
                     +------------------------>|  pr_controller  |  one partition at a time,
                                               +--------+--------+  pr_cycles each
                                          load_en/frame | cur_variant (fed back to policy)
          +---------------+---------------+-------------+---+---------------+
          v               v               v                 v               v
   recon_partition  recon_partition     ...          recon_partition   (K = 6)
   3 x kernel_slot (CE | PU | BAU per frame) -> tmr_voter ; 3 x parity_checker
```

All numbers in the cost model are unsigned Q16.16 values in 32 bits: 1.0 is
`0x0001_0000`. Products are formed at full width and saturate.
`prowaft_pkg.sv` holds the types: `variant_t`, `frame_t`, `feat_t`,
`cand_part_t`, `cand_hdr_t` and `glob_t`.

## The decision rule, step by step

One workload is one CNN layer. It arrives with three things:

* a feature word: layer type, input-size class, precision class and a
  conditional-path flag;
* the amount of work mapped to each partition, `wl_ops[k]`;
* the current upset-probability estimate of each partition, `p_fault[k]`.

`policy_engine` then runs the following steps.

1. **Criticality.** `WCS = a*S_data + b*S_control + g*P_error` (`wcs_unit`).
   S_data and P_error come from a 64-entry table indexed by
   {layer type, size class, precision}. S_control is the descriptor's flag.
   The host fills the table from offline profiling: the entropy of the
   output activations for S_data, and single-bit fault injection for
   P_error.
2. **Reference.** The fault-free latency and energy of the reference
   candidate (`ref_idx`, the all-baseline configuration) are computed. Two
   reciprocals are then taken with a 33-cycle restoring divider
   (`recip_divider`).
3. **Per candidate j** (two cycles each):
   * `perf_model`: `T_base = sum_k ops_k * inv_rate_kj + T_comm_j`. `inv_rate`
     is the host-precomputed `1/(f_k * PE_k)`. Also
     `E_base = sum_k Pdyn_kj * ops_k * inv_rate_kj + Pstatic_j * T_base`.
   * `rrs_unit`: `RRS = (1/Z) * sum_k p_k * WCS * lambda_kj * fanout_kj * rho_k`,
     clamped to 1. The four fractional factors of each term are multiplied
     at full width before a single shift. Without that, probabilities around
     0.001 would lose most of their bits.
   * `pr_overhead`: the partitions whose variant differs from the loaded
     one, `T_reconfig` and `E_reconfig` (sums of per-partition costs), and
     `Delta_PR = wT*T_reconfig + wE*E_reconfig`. Feasibility means that the
     candidate implements the layer type and, if it changes anything,
     `T_reconfig` fits the remaining time budget and `E_reconfig` the
     remaining energy budget.
   * The cost: `T~ = T_base*(1+eps_T*RRS)/T_ref` and
     `E~ = E_base*(1+eps_E*RRS)/E_ref`. Then
     `J = eT*T~ + eE*E~ + eR*RRS + [changes]*Delta_PR`. The lowest J among
     the feasible candidates is kept; on a tie the lower index wins.
4. **Decision.** `dec_valid` pulses with the chosen index, `dec_reconfig`
   and the cost. If nothing is feasible, `dec_none` is set and the
   configuration stays. A reconfiguring decision charges its `T_reconfig`
   and `E_reconfig` to the two budgets. They are reloaded to `budget_init`
   and `budget_e_init` at the first workload of every window of `window`
   workloads.

Latency: a decision takes 71 + 2*NCAND clock cycles from the accepting edge
of `wl_valid && wl_ready`. That is 103 cycles for the default 16
candidates, about 1 µs at 100 MHz.

"Staying" has no special case. The candidate equal to the loaded
configuration simply has no PR term, and it is not checked against the
budget.

### How protection lowers risk

The risk formula has no term for protection. Its only per-configuration
inputs are the utilisation lambda and the fanout. In this design a
partition that a candidate puts in TMR has its risk term multiplied by
`tmr_residual`. This is the share of risk that survives triplication, 0 by
default. Without some such term, TMR would only ever cost time and energy,
and the controller would never choose it.

## Partitions, frames and faults

The FPGA swaps the partition's logic by partial reconfiguration. RTL cannot
express that, so `recon_partition` models it with configuration frames:

* Each of its three replicas (`kernel_slot`) contains all three kernels.
  The replica's 33-bit configuration frame selects which kernel drives the
  output.
* The frame layout is `{tmr, kernel[1:0], shift[4:0], relu, scale[7:0],
  bias[15:0]}`, bit 32 down to bit 0.
* A load, issued by the PR controller when a partition's PR time has
  elapsed, writes the same frame and its even-parity bit into all three
  replicas.
* The frame of replica 0 selects the mode:
  * baseline: replica 0 drives the output, and only replica 0's parity is
    watched;
  * TMR: valid and data of the three replicas pass through a bitwise 2-of-3
    voter (`tmr_voter`), and all three parities are watched.
* `seu_en/seu_replica/seu_bit` flips one frame bit. This is how the
  software-driven SEU injection used in evaluation is reproduced:
  * an upset in the kernel field makes that replica compute a different
    function;
  * an upset in a parameter field makes it use a wrong constant;
  * an upset in an unused field is harmless but still detected.
* `parity_err` reports an upset in a frame that is in use. `tmr_mismatch`
  reports a cycle in which the replicas disagree.
* Reloading a partition by PR rewrites its frames, so reconfiguration also
  clears upsets.
* While `pr_active` is high, the partition produces no output.

The kernels:

| kernel | input per beat | operation | output, 1 cycle later |
|---|---|---|---|
| CE (`conv_engine`) | 9 int8 activations, 9 int8 weights | dot product added to a 32-bit accumulator; the first beat of an output pixel (`in_first`) starts from the bias | running sum |
| PU (`maxpool_unit`) | 9 activations | maximum of a 3x3 window; a 2x2 window is sent with the other five taps at -128 | int8, sign-extended |
| BAU (`bn_act_unit`) | 32-bit accumulator `acc_in` | `((x*scale)>>>shift)+bias`, optional ReLU, saturate to int8 | int8, sign-extended |

A kernel larger than 3x3 (5x5, 7x7), a 1x1 convolution over many channels,
or an FC layer is run on the CE as several beats accumulated into one
output. Unused taps of the last beat get zero weights.

The mapping of the three evaluated networks onto these kernels:

| layer | mapping | beats per output |
|---|---|---|
| ResNet-18 stem, 7x7 conv | 49 taps per input channel | 6 per channel |
| 3x3 conv | one beat per input channel | C_in |
| depthwise 3x3 / 5x5 (MobileNetV2, EfficientNet-Lite) | one channel | 1 / 3 |
| 1x1 conv, FC | 9 input channels per beat | ceil(C_in/9), e.g. 57 for 512 inputs |
| 3x3 or 2x2 max-pool | PU | 1 |
| global average pool | CE sum with unit weights, then BAU scale (e.g. 84>>12 for 1/49) | 6 for 7x7 |
| batch norm + ReLU / ReLU6 | BAU; ReLU6 is the int8 saturation when 6.0 is quantised to 127 | 1 |

The worst accumulator magnitude in these networks is 512 x 9 x 128 x 128,
about 75 million, well inside 32 bits. The partitions hold no feature
maps, so the input size (32x32 up to 224x224 in the evaluation) does not
limit the design. Size enters the decision only through the 3-bit size
class and the per-partition work `wl_ops`. `wl_ops` is a Q16.16 count in
units the host chooses; in MMAC, the largest layer (the 224x224 stem,
about 118 MMAC) fits easily.

## PR sequencing and the top level

`pr_controller` takes the target variants of all partitions. It walks
through them in index order. Each partition that changes is held in
`pr_active` for `pr_cycles` cycles, then loaded. A changed partition costs
`pr_cycles + 2` cycles and an unchanged one costs 1. `pr_cycles` resets to
420 000: the 4.20 ms single-partition PR time reported for the prototype,
at an assumed 100 MHz.

`prowaft_top` connects `param_tables`, `policy_engine`, `pr_controller` and
six `recon_partition`s. The host does the following:

1. Writes the tables through `cfg_we/cfg_addr/cfg_wdata`. The address map
   is in the header of `param_tables.sv`.
2. Loads an initial configuration with `boot_valid/boot_cand`. This does
   not charge the budget.
3. For each layer, offers a descriptor and waits for `wl_ready`.
   `wl_ready` is low while a decision or a reconfiguration is in progress,
   so PR stalls the workload stream.
4. Streams the layer's beats through the partition ports `p_in_*/p_out_*`.

The partitions' data ports are separate, because the chaining of partitions
and their memory interface are not specified. An assertion checks that a
descriptor offered with `wl_valid` stays offered until accepted.

Reset values in `param_tables` (Q16.16):

* composite-cost weights eta = (0.4, 0.3, 0.3): the balanced profile
  reported for the prototype;
* per-partition PR cost: 4.20 ms and 1.10 mJ, also as reported;
* this design's own defaults: WCS weights 0.4/0.2/0.4, eps_T = eps_E = 0.5,
  omega = 0.01 per ms and per mJ, 1/Z = 1, TMR residual 0, PR budget 42 ms
  per 40 workloads, no energy limit.

The WCS table and the candidate table reset to zero and must be written.

## What follows the method and what is this design's own

Follows the method:

* K = 6 partitions;
* a library of CE, PU and BAU, each also as a TMR variant;
* the criticality score, the latency and energy model, the FPF/RRS risk
  model, the fault-aware inflation, the PR overhead, the composite cost,
  and the receding-horizon argmin with budget filtering;
* SEUs in configuration bits, detected by parity;
* the default weights and PR costs listed above.

This design's own choices:

* everything inside the kernels: window sizes, the folded batch norm, ReLU,
  the timing;
* the voter and the frame format;
* Q16.16 arithmetic and the table layout;
* reciprocals precomputed for `1/(f*PE)`;
* the TMR residual factor;
* per-partition additive PR costs;
* the budget window rule;
* the PR budget as two separate limits, one on reconfiguration time and
  one on reconfiguration energy (the method says "time and/or energy");
* 16 candidates;
* the 100 MHz clock;
* PR of one partition at a time;
* separate partition data ports;
* the boot request.

Not built:

* the processor that runs feature extraction and estimates `p_fault`;
* the vendor configuration port and the partial bitstreams;
* the upset injector, which is software: the testbenches play its role;
* the reactive and static baselines used for comparison. Static-base and
  static-TMR can be expressed as candidate-table entries.

The method's overview also mentions a bi-level MDP policy. The
implementation it describes, and the one built here, is the one-step
receding-horizon rule.

Limits to keep in mind:

* The decision is computed in the fabric in about 100 cycles. The prototype
  reports 0.5 ms for a software decision, so latency figures are not
  comparable.
* Average pooling is not a kernel of the library. It can be done as a CE
  sum followed by a BAU scale.

## Verification

Every module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line. Each module's results are compared
with references computed independently in the testbench, in floating point
for the cost model (within stated tolerances) and with 64-bit integers for
the datapath.

* `policy_engine_tb` recomputes Eqs. (1) to (8) for 150 random workloads.
  It checks the following:
  * the chosen candidate is feasible and within 0.2 % of the true minimum;
  * the time and energy budget bookkeeping is right;
  * the decision takes exactly 71 + 2*NCAND cycles;
  * each of these cases occurs: reconfigure, stay, a candidate cut by the
    time budget, one cut by the energy budget alone, one cut by layer
    type, and no feasible candidate.
* `recon_partition_tb` checks every variant. It also checks that an upset
  in a TMR replica is masked and flagged, that an upset in a baseline
  partition propagates and is flagged, and that a reload clears it.
* `prowaft_top_tb` runs the whole design with every parameter at its
  default, including the 420 000-cycle PR time. The host writes the tables
  that reset to zero. It also changes two registers: 1/Z = 24, which
  spreads RRS over [0, 1] for the test data, and a 30 ms PR budget, so that
  the budget actually runs out. It runs 80 layers with sinusoidal fault risk and random upsets
  (about 45 s in Verilator). It checks:
  * every decision is followed by the right partition contents;
  * each PR lasts exactly the PR time;
  * every partition output is exact, except outputs of a baseline partition
    whose active frame is upset;
  * parity reports exactly the upsets in use;
  * TMR usage is higher at high risk than at low risk;
  * boot, reconfiguration, stay, PR stall, budget exhaustion, TMR masking,
    error propagation, parity detection, replica mismatch and scrub by
    reconfiguration each occurred.
* `cnn_layers_tb` runs slices of real layers, with reduced channel counts
  and map sizes, through CE-TMR, BAU-TMR and PU-TMR partitions chained as
  one layer pipeline:
  * the ResNet-18 7x7/2 stem with its 3x3/2 max-pool, and a 3x3 conv over
    16 channels;
  * a MobileNetV2 depthwise 3x3 followed by a pointwise 1x1;
  * an EfficientNet-Lite 5x5 depthwise conv;
  * a global average pool and a 512-input FC layer.

  It compares every output with a 64-bit reference. In each layer it flips
  one random frame bit, and checks that the output stays exact and that
  parity reports the upset.
* `prowaft_profiles_tb` runs the same 500-layer trace four times side by
  side. Only the composite-cost weights (eta_T, eta_E, eta_R) differ:
  * balanced 0.4/0.3/0.3;
  * performance 0.6/0.3/0.1;
  * energy 0.3/0.6/0.1;
  * reliability 0.2/0.2/0.6.

  It checks that protection follows the weights: the mean number of TMR
  partitions must be higher under the reliability weighting than under
  the balanced one, higher under the balanced one than under the
  performance one, and lower under the energy weighting than under the
  reliability one. With the synthetic candidate costs used here the means
  come out about 5.6, 2.7, 1.4 and 1.4. The reconfiguration counts are
  printed (about 113, 98, 90 and 89) but not checked.
* `prowaft_trace_tb` runs a 500-layer trace, the length of the evaluation
  trace, with the PR time register set to 2000 cycles. It makes about 115
  reconfiguration decisions. The prototype reports 127 reconfiguration
  events on its trace; the numbers are not directly comparable, because the
  candidate data here is synthetic.

Simulate one testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/prowaft_pkg.sv \
  tb/prowaft_top_tb.sv --top-module prowaft_top_tb -Mdir obj && obj/Vprowaft_top_tb
```

For a leaf block, name its file instead (`rtl/conv_engine.sv
tb/conv_engine_tb.sv --top-module conv_engine_tb`).
