# Probabilistic coprocessor (p-computer), FPGA emulation in SystemVerilog

## Main idea

Many statistical and optimisation algorithms are built from the same loop:
draw random numbers, push them through a small function, and count what
comes out. A probabilistic coprocessor puts this loop in hardware and
replicates it many times. It has three parts:

- **RNG**: an N-bit random number generator.
- **Kernel**: a small problem-specific datapath.
- **Data collector**: a counter bank shared by all N_p parallel RNG/kernel
  units.

Each unit produces one sample per clock, so the sample rate is
`f_clk * N_p`. The time to solution is `N_S / (f_clk * N_p)` for N_S
samples.

Two kinds of problems use this structure:

- **Independent sampling** (Monte Carlo, bootstrap, Bayesian network): the
  units never talk to each other.
- **Markov chain Monte Carlo (MCMC)**: the kernel's decision feeds back into
  the state that the next proposal starts from.

In the intended integrated chip, each random bit would come from a
stochastic magnetic tunnel junction p-bit. In this FPGA-style emulation,
every random source is a linear-feedback shift register (LFSR).

This repository holds the four kernels used to benchmark the idea:

- estimating pi;
- bootstrap resampling;
- a Bayesian network of a family tree;
- the 0-1 knapsack problem.

It also holds the host interface around them: AXI-Lite registers, a
time-stamped result stream and an AXI4 writer into DDR4. All four kernels
sit side by side in one top, `pcomputer_top`. Each is an *engine*: its unit
array plus its collector.

```
 host --AXI-Lite--> axil_ctrl --cfg broadcast--> pi_engine    --+
                       ^                         boot_engine  --+--> result_mux --> ddr_writer --AXI4--> DDR4
                       |                         bayes_engine --+    (time stamp)    (ring buffer)
                  status/done                    knap_engine  --+
```

## Files

All design files are in `rtl/`:

| File | Contents |
|---|---|
| `pc_pkg.sv` | Shared types (`cfg_t`, `rec_t`, `trec_t`), record tags, LFSR tap table and seed hash |
| `lfsr.sv` | W-bit Fibonacci LFSR; one W-bit word per clock |
| `popcount.sv` | Adds the bits of a vector (the collectors' adder trees) |
| `pi_kernel.sv`, `pi_engine.sv` | Pi estimation |
| `boot_kernel.sv`, `boot_engine.sv` | Bootstrap histogram |
| `pbit.sv`, `bayes_engine.sv` | Bayesian network of p-bits |
| `knap_chain.sv`, `knap_engine.sv` | Knapsack Markov chains with annealing |
| `result_mux.sv` | Round-robin record merge with a 64-bit time stamp |
| `ddr_writer.sv` | AXI4 write master into a DDR ring buffer |
| `axil_ctrl.sv` | AXI-Lite slave, configuration broadcast, global registers |
| `smtj_pbit.sv` | Behavioural (real-valued) model of the magnetic p-bit; not synthesisable |
| `pcomputer_top.sv` | The coprocessor |

The testbenches are in `tb/`:

- There is one self-checking testbench per module (`<module>_tb.sv`).
- `pcomputer_top_small_tb.sv` runs the end-to-end test on a reduced array.
  The flow is in `top_tb_body.svh`.
- `axi_mem_model.sv` models the DDR side.

## Control path: how the host talks to the engines

**Address decoding.** The AXI-Lite slave has a 24-bit byte address and
32-bit data. It decodes every write into a one-clock broadcast, `cfg_t`:

- `target = addr[23:20]` selects an engine;
- `offset = addr[19:2]` is the word offset;
- `data` is the written word.

Each engine decodes the broadcast itself. There is no read-back of engine
registers. Reads go only to the global block (target 0xF).

| Target | Engine |
|---|---|
| 0 | pi |
| 1 | bootstrap |
| 2 | Bayesian network |
| 3 | knapsack |
| F | global |

**Global registers (target F, word offsets):**

| Offset | Access | Meaning |
|---|---|---|
| 0, 1 | R/W | DDR ring base, low and high halves |
| 2 | R/W | Ring size in bytes |
| 8 | R | ID 0x50430001 |
| 9 | R | Status: bits 7:4 busy, bits 3:0 done |
| 10 | R | Records written |
| 11 | R | Time stamp, low half |

**Starting and finishing a run.**

- Writing 1 to offset 0 of an engine starts it. The write also clears that
  engine's sticky *done* bit.
- At the end of a run, every engine emits its results as 64-bit records and
  then raises *done*.
- Writes complete in two clocks. Read data comes one clock after the
  address.

## Result path: records, time stamps, DDR

**Record format.** A record (`rec_t`) is `{tag[3:0], index[11:0], value[47:0]}`.

| Tag | Meaning |
|---|---|
| 1 | pi: samples inside the circle |
| 2 | pi: all samples |
| 3 | bootstrap: bin count (index = bin) |
| 4 | Bayes: +1 outcomes (index = node) |
| 5 | Bayes: agreements with the reference node (index = node) |
| 6 | Bayes: total samples |
| 7 | knapsack: improvement during the run (index = chain, value = new best) |
| 8 | knapsack: final best (value = {weight[23:0], gold[23:0]}) |
| 9 | knapsack: 32 bits of the best item vector (index = {chain, word}) |

**Time stamps.** `result_mux` takes one record per clock from the four
engines, using round-robin arbitration. It attaches the 64-bit free-running
clock count at the moment it accepts the record.

The knapsack improvement records are time-stamped this way. The time to
reach a solution quality can therefore be read off the stored stream, with
no host involvement during the run.

**DDR storage.** `ddr_writer` stores each time-stamped record as one INCR
burst of two 64-bit beats: the time stamp first, then the record. Records
go into a ring buffer `[base, base+size)` at 16 bytes per record.

- The writer keeps one burst outstanding.
- It ignores the write response.
- Back-pressure stalls the engines through the ready/valid handshakes, so no
  record is lost. An engine waits in its emit state.

The host later reads the ring, e.g. by DMA over PCIe.

## Pi engine

**One unit.** A unit holds two 18-bit LFSRs, which give the coordinates x
and y as fractions in [0,1). The kernel is pipelined in three stages:

1. It squares x and y into two 36-bit products.
2. It adds the products into a 37-bit sum.
3. It compares the sum with 1.0 (`2^36`).

The output bit is 1 when the point lies outside the quarter circle.

**The array and collector.** There are 2800 units, so 2800 samples are taken
every clock. Each clock the collector counts the outside bits with a
registered popcount. It then updates two counters:

- `N_in += 2800 - outside`
- `N_all += 2800`

Both counters are 48 bits wide. The estimate is `pi ~ 4 N_in / N_all`.

**Registers:**

| Offset | Meaning |
|---|---|
| 0 | Start |
| 1 | Run length in clocks |

At the end of a run the engine emits two records: N_in, then N_all.

## Bootstrap engine

**What it computes.** The bootstrap asks how uncertain a statistic is by
resampling the data with replacement many times. The benchmark compares the
mean birth weight of two groups of babies: mothers who smoke and mothers who
do not. It builds a 64-bin histogram of the difference of the two means
over many resamples.

**One unit.** Each unit has:

- two 16-bit LFSRs;
- two look-up tables holding the two groups' data (16-bit entries, up to
  1024 per group);
- two "mean registers" (accumulators).

Every clock, each group draws one table entry. The index is
`(r * n) >> 16`, so that draws are uniform over the n entries. The drawn
value is added to that group's accumulator.

After `P = max(n_a, n_b)` clocks, group A has drawn `n_a` values and group B
has drawn `n_b`. That makes one complete resample of each group.

**From sums to a bin.** The kernel then computes the result in three
registered steps:

1. **Means.** Each sum is multiplied by a reciprocal supplied by the host,
   `round(2^24/n)`. This gives the means with 8 fraction bits. There is no
   divider.
2. **Difference.** The two means are subtracted.
3. **Bin.** The bin is `((diff - bin_pos) * bin_scale) >> 16`. Differences
   outside the range are clamped to the edge bins. The bin width is
   `2^16/bin_scale` in units of 1/256.

The bin leaves the kernel as a 64-bit one-hot vector.

**The array and collector.** There are 1500 units in lock-step with
different seeds. Every P clocks they all deliver a vector at once. For each
bin, the collector counts how many units hit it (a popcount over the units)
and adds that into a 48-bit counter. After the set number of rounds, it
emits the 64 bin counts.

**Registers:**

| Offset | Meaning |
|---|---|
| 0 | Start |
| 1 | Rounds |
| 2, 3 | n_a, n_b |
| 4, 5 | recip_a, recip_b |
| 6 | bin_pos (signed, 8 fraction bits) |
| 7 | bin_scale |
| 0x10000+i | Table A entry i |
| 0x20000+i | Table B entry i |

All units receive the same table writes. Each unit keeps its own copy of the
tables, because every unit reads its own random index every clock.

## Bayesian network engine

This is the least obvious engine.

**The model.** The network models inheritance in a family tree of 7
generations:

- 64 founders are in the first generation.
- Each later generation has half as many members, down to 1.
- There are 127 members in all.

Each member is a **p-bit**: a binary random variable that is +1 with a
tunable probability. In hardware, a p-bit is an LFSR word compared against
a threshold: `m = thr > lfsr`. The threshold is 17 bits wide, so that
probability 1 is reachable.

**Inputs and thresholds.** Member j of generation k+1 has two parents,
members 2j and 2j+1 of generation k. Its input is a multiply-and-accumulate
over the parents' states (m = ±1):

```
I = b + w0*m0 + w1*m1
```

The weights are per-node signed 4-bit values. An activation table of 64
entries, indexed by I+32, turns I into the threshold. All p-bits share this
table.

**The reference setting.** This setting gives the genetic model:

- founders: b = 0;
- everyone else: w0 = w1 = 1;
- table values 0, 2^15+1 and 2^16 at I = -2, 0 and +2.

With it, a child copies one randomly chosen parent. The correlation between
relatives then halves with each generation between them. The testbench
measures:

| Relation | Correlation |
|---|---|
| Parent–child | 0.50 |
| Grandparent | 0.24 |
| Three generations apart | 0.12 |
| Four generations apart | 0.06 |
| Unrelated | about 0 |

**Pipelining.** The generations are pipelined. Every clock, each generation
samples from the previous generation's registered states. This gives one
complete network sample per clock, with a latency of one clock per
generation.

To bring the members of one sample back together, generation k is delayed by
`6-k` clocks before the collector. Without that alignment, the collector
would correlate a child with an unrelated later sample of its parent.

**Copies.** The whole network is instantiated 10 times, for 1270 p-bits. All
copies get the same weights and differently seeded LFSRs.

**The collector.** It measures correlations with one reference member r
(a register). For every member g it counts, over all copies and clocks:

- `pos[g]`: the +1 outcomes;
- `agree[g]`: the agreements with r.

With T samples:

```
corr(g,r) = (2 agree - T)/T - (2 pos[g] - T)(2 pos[r] - T)/T^2
```

The engine emits 127 pos records, 127 agree records and one total record.

**Registers:**

| Offset | Meaning |
|---|---|
| 0 | Start |
| 1 | Clocks to collect |
| 2 | Reference member |
| 0x100+i | Activation table entry i |
| 0x1000+4g+k | Node g: k = 0 bias, 1 w0, 2 w1 |

## Knapsack engine (MCMC)

**The problem.** Choose a subset of N items that maximises the total value
("gold") while keeping the total weight at or below the capacity C.

**One chain.** A chain holds the state: an N-bit item vector and its weight
and gold totals. Every clock it proposes flipping two random items i and j.
A proposal passes through three stages:

- **Stage 0, random numbers.** Three 16-bit LFSRs give i, j (scaled to
  `n_items`) and a uniform number u.
- **Stage 1, table read.** The item weights and values of i and j are read.
- **Stage 2, decision.**
  1. Read `x_i` and `x_j` from the *current* state.
  2. Compute ΔWeight and ΔGold.
  3. Weight check: `tot_w + ΔW <= C`.
  4. Gold check: `ΔV > 0` accepts outright. Otherwise the Metropolis test
     applies: `u < exp(ΔV/T)`. The exponential comes from a 256-entry table
     loaded by the host, indexed by `min(255, (-ΔV*beta)>>8)`.
  5. On acceptance, both bits and both totals update in the same clock.

**Why the pipeline stays correct.** A new proposal starts every clock,
although each proposal takes three clocks to decide. What makes this
correct is the **feedback**: the accept/reject result is the state that
later proposals start from. Only the two item positions are chosen early.
The bits themselves are read from the state register in the same clock that
the state may be written, so a proposal never works on a stale state. A
proposal with i = j is rejected.

**Best solution.** Each chain keeps its best gold so far, with the matching
weight and a copy of the item vector.

**Annealing.** The temperature halves every tenth of the run. In this
design, the inverse temperature `beta` starts at `beta0`. It doubles,
saturating at 0xFFFF, every `anneal_period` clocks. The host sets
`anneal_period = n_cycles/10`.

**The engine.** Ten chains run in parallel, with different seeds.

- **During the run:** whenever a chain beats its own best, it sends an
  improvement record (chain, new best). Records are sent round-robin among
  chains with a pending improvement. The record's time stamp gives the time
  to solution.
- **After the run:** each chain reports its best weight and gold, then its
  best vector in 32-bit words.

**Registers:**

| Offset | Meaning |
|---|---|
| 0 | Start (clears the chains to an empty knapsack) |
| 1 | n_cycles |
| 2 | n_items |
| 3 | capacity |
| 4 | beta0 |
| 5 | anneal_period |
| 0x100+i | Exponential table |
| 0x10000+i | Weight of item i |
| 0x20000+i | Value of item i |

**Sizes.** Weights and values are 10 bits (0..1000). Totals are 24 bits.
Each chain holds up to 8192 items.

## Magnetic p-bit model

`smtj_pbit` is a behavioural model of the device the integrated chip would
use in place of the LFSRs. It is not synthesisable and not used by the top.

- It has real-valued ports `V_IN`, `V_REF` and `V_OUT`.
- Every `TAU_NS` it draws a new output, +VDD/2 or −VDD/2.
- The probability of +VDD/2 is `(1+tanh(V_IN/V0))/2`.
- The time-average of `V_OUT` therefore follows `VDD/2 * tanh(V_IN/V0)`.

Its testbench sweeps V_IN and checks that curve.

## Sizes and what fits

| Workload | Built size | Needed |
|---|---|---|
| Pi | 2800 units × 18-bit coordinates; 48-bit counters (2.8e14 samples) | Runs of up to a few 1e9 samples |
| Bootstrap | 1500 units, 64 bins, 1024-entry tables | 1174 mothers in two groups of 715 and 459 |
| Bayesian network | 127 nodes × 10 copies | 127 nodes × 10 copies |
| Knapsack | 10 chains, up to 8192 items, values and weights up to 1000, run length up to 2^32 clocks | Problems up to about 8000 items |

All of these are the defaults of `pcomputer_top`.

## Design choices that are not dictated by the architecture

- **One top for all four kernels.** The kernels share one top and one
  register map. One could instead build one image per kernel; each engine is
  self-contained, so that only needs a different top.
- **Host-visible formats.** The register map, record format, DDR ring buffer
  and time-stamp source are all local choices.
- **LFSRs.** The taps come from a standard maximal-length table. Each
  instance gets a seed hashed from its index.
- **Pi.** The kernel uses a 3-stage pipeline.
- **Bootstrap.**
  - Means use reciprocal multiplication.
  - Out-of-range differences are clamped to the edge bins.
  - The units run in lock-step.
- **Bayesian network.**
  - Weights are 4-bit signed.
  - The activation table is shared by all p-bits.
  - The collector measures correlation against a single reference node.
- **Knapsack.**
  - The exponential comes from a table.
  - beta doubles, rather than T halving exactly at sample boundaries.
  - Proposals with i = j are rejected.
  - The weight test is "≤ capacity".
- **Reset.** Reset is synchronous and active high. All state is reset or
  written before it is read, so the design also works in two-state
  simulation.

## Simulation

Any testbench runs with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pc_pkg.sv tb/bayes_engine_tb.sv --top-module bayes_engine_tb
obj_dir/Vbayes_engine_tb
```

- Every testbench checks itself and ends with
  `TB_RESULT checks=<n> failures=<m>`.
- Each testbench has a watchdog.
- The end-to-end testbench uses `axi_mem_model` as DDR4.
- The end-to-end testbench plays the host: it programs all four engines,
  runs them concurrently, and decodes every record stored in DDR. It checks:
  - the pi sample count and estimate;
  - the histogram total;
  - the Bayesian totals and the parent–child correlation;
  - that each knapsack best vector matches its reported weight and gold and
    respects the capacity;
  - that time stamps are in order.

  It also exercises concurrent records, ring wrap-around, DDR back-pressure
  and annealing steps.
- The knapsack optimum is checked against a dynamic-programming reference
  in `knap_chain_tb` and `knap_engine_tb`.
- **Largest size simulated end to end.** The end-to-end test uses these
  sizes:
  - 64 pi units;
  - 32 bootstrap units with 1024-entry tables;
  - the full 7-layer network with 10 copies;
  - 3 knapsack chains with 256-item tables.

  The run is about 5000 clocks. The engines were each simulated separately,
  with their own testbenches.
- **Full default size.** At the full default size (2800 + 1500 units, 1270
  p-bits, 10 chains of 8192 items), Verilator's C++ model alone takes well
  over ten minutes to compile. For that reason there is no full-size
  simulation. To try it, copy `pcomputer_top_small_tb.sv` and remove the
  parameter list on the top instance.
