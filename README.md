# BayesPerf inference accelerator in SystemVerilog

A CPU has only a few hardware performance counters per core, but a profiler
usually wants many more events than that. The kernel therefore multiplexes:
in each scheduling time slice a different subset of events is programmed into
the counters, and the count of each event is extrapolated from the slices in
which it was actually measured. The extrapolation can be badly wrong. Many
events, however, are tied to each other by what the microarchitecture does
(for example, stall cycles are caused by memory-bandwidth or memory-latency
stalls, and one is the sum of the other two). The BayesPerf idea is to treat the
true event values as unknowns with a probabilistic model. That model
combines the noisy multiplexed measurements with these invariants. The
estimate reported for each event is then a posterior distribution, not a
raw scaled count.

The posterior is computed with **expectation propagation (EP)** over a
window of time slices, using **Markov-chain Monte Carlo (MCMC)** samplers.
This RTL is an accelerator for that computation. It has these parts:

- four EP engines, one per time slice of the window;
- twelve MCMC samplers, three working for each engine;
- a 16-port butterfly network-on-chip that links the engines and the samplers;
- a global controller that combines the engines' results;
- a memory crossbar that keeps one copy of the input data in each of four
  DRAM channels.

The host PCIe link, its DMA engine and the DRAM devices are not part of the
RTL. They appear as ports.

```
 host MMIO ──► ep_controller ◄──── job / result ────► ep_engine ×4 ──► mem_xbar ──► DRAM ch 0..3
 host data ─────────────────────────────────────────────────────────► mem_xbar   (writes go to all 4)
                                    ep_engine ×4 ◄──► noc_butterfly ◄──► mcmc_sampler ×12
```

## 1. The model being solved

Take D events with true values θ = (θ₀ … θ_{D−1}) and K time slices. Slice k
measured some of the events. For each measured event i, the host gives an
observed value m_ki and a precision τ_ki, which is 1/variance. The
measurement error is Gaussian. A value τ_ki = 0 means the event was not
measured in that slice.

Each slice may also carry one linear invariant Σ a_ki θ_i ≈ 0. It enters the
model with weight κ as the factor exp(−½κ(Σ a_ki θ_i)²). A relation such as
"stalls = bandwidth stalls + latency stalls" is written this way with
coefficients (1, −1, −1).

The prior is a zero-mean Gaussian with precision PRIOR_PREC for every event.

The posterior is the product of the prior and the K slice factors ("sites").
EP approximates every site by a diagonal Gaussian g_k. The global
approximation is then g = prior · Π g_k.

## 2. Expectation propagation in natural parameters

Every Gaussian in the design is stored per event as a **precision** r and a
**shift** s = r·mean. Both are Q16.16 numbers. In this form a product of
Gaussians is a sum of (r, s), and a quotient is a difference. The EP loop
then needs only additions, plus one division per event in two places.

One EP job for slice k runs as follows:

| step | operation | where |
|---|---|---|
| cavity | r₋ = r − r_k, s₋ = s − s_k, mean₋ = s₋ / r₋ | EP engine |
| tilted moments | the samplers draw from p(θ) ∝ site_k(θ)·N(θ; mean₋, 1/r₋) and return E[θ_i] and E[θ_i²] | 3 samplers |
| moment match | the three samplers' moments are averaged; var = E[θ²] − E[θ]²; r_new = 1/var; s_new = mean·r_new | EP engine |
| site update | Δr = r_new − r, Δs = s_new − s; the site keeps r_k += Δr, s_k += Δs | EP engine |
| global update | r += Δr, s += Δs | controller |

The four engines run their jobs in parallel. The controller applies returned
updates one per clock, round robin. An engine that has delivered its result
immediately gets the current g for its next job. The updates are therefore
applied asynchronously, in the order they arrive, not in lock-step sweeps.

A run ends in one of two ways:

- every engine has done MAX_ITERS jobs;
- the latest update of every engine had all |Δ| below TOL. STATUS then
  reports "converged".

**Safeguards.** Subtracting a site can leave a cavity precision that is tiny
or negative. This is the usual EP failure mode. If r₋ < 2⁻⁸, the engine does
two things:

- it clamps r₋ to 2⁻⁸;
- it takes the cavity mean from g, i.e. s/r, rather than s₋/2⁻⁸, which would
  throw the cavity far away.

A sample variance below 2⁻⁸ is likewise clamped. Both events are counted on
`n_clamp`.

## 3. The EP engine (`ep_engine`)

The engine is a single state machine with one shared sequential divider.
The divider produces a Q16.16 quotient 49 clocks after its start. Per job
the engine goes through these states:

1. **LOAD** (first job of a run only). Reads the slice record from its own
   DRAM channel: D observed values, D precisions and D invariant
   coefficients, 3·D words starting at `site_base`.
2. **CAV / DIV_CAV**. Forms the cavity and divides s₋ by r₋ for each event.
   This takes D divisions.
3. **SEND**. Writes the sampler registers of its three samplers as network
   flits. Each sampler gets 5·D + 5 flits:
   - cavity means, cavity precisions, observations, precisions, coefficients;
   - κ, step, sample counts and a seed;
   - START, whose bit 0 means a warm start.

   The flits go out word by word across the three samplers, so the three
   START flits leave on consecutive clocks. The chains then run in step,
   and their results meet in the network on the way back.

   The seed is a hash of the engine port, the job count and the sampler
   index. Every chain of every job therefore gets a different stream.
4. **WAIT**. Accumulates the means and second moments as the samplers'
   result flits arrive. This may begin while SEND is still running.
   Moves on after the third DONE flit.
5. **MOM / DIV_REC**. Scales the sums by 1/3, computes the variances and
   divides 1/var for each event. This takes D divisions.
6. **DELTA / RES**. Forms Δ, updates its site, and offers the result to the
   controller with the flag `small`.

Warm start: from the second job of a run onwards, the samplers continue the
Markov chain from where the previous job left it. Only the cavity changes.

The engine overhead per job is about 2·D·49 clocks of division plus about
15·D flits of traffic, roughly 1,000 clocks at D = 8. The sampling time is
much larger (see §7).

## 4. The MCMC sampler (`mcmc_sampler`)

The sampler runs random-walk Metropolis over the whole vector θ. Its energy
(−log density, up to a constant) is

```
E(θ) = Σ_i ½ λ_i (θ_i − μ_i)²       cavity (λ = r₋, μ = mean₋)
     + Σ_i ½ τ_i (θ_i − m_i)²       this slice's measurements
     + ½ κ (Σ_i a_i θ_i)²           the invariant
```

One sample takes **D + 1 clocks**:

- Clocks 1 to D each take one word from the uniform generator, propose
  θ'_i = θ_i + w_i·(2u − 1), and add event i's energy terms and its part of
  Σ a_i θ'_i.
- On the last clock the sampler adds the invariant term and makes the
  accept test E' − E ≤ −ln u.

The proposal half-width is w_i = STEP / √(λ_i + τ_i), with the square root
rounded to a power of two. It is taken from the leading-one position of
λ_i + τ_i. STEP is therefore a width in units of each event's own standard
deviation, and well-measured and poorly-measured events mix alike.

The accept test computes −ln u as ln 2 · (−log₂ u):

- The integer part of −log₂ u is the leading-zero count of the 32-bit
  uniform word.
- The fraction comes from the linear (Mitchell) approximation
  log₂(1 + f) ≈ f.

This needs no table and no multiplier beyond the one ln 2 constant. The
error of the Mitchell approximation, at most 0.086 in log₂, slightly biases
the acceptance rate. It does not bias the moments noticeably at the
tolerances tested.

After START the sampler works in this order:

1. One pass with zero step, always accepted, to get E(θ).
2. BURNIN discarded samples.
3. 2^LOG2_NSAMP kept samples. Their sums of θ and θ² use 48-bit
   accumulators.
4. The sums are shifted right by LOG2_NSAMP.
5. The sampler sends D means, D second moments and a DONE flit. The DONE
   flit carries the number of accepted proposals.

A cold START begins the chain at the cavity mean. A warm START keeps the
previous state.

The uniform generator (`urng`) is a 32-bit xorshift generator (shifts 13, 17,
5). It gives one word per clock. A zero seed is replaced by a fixed non-zero
constant.

## 5. The network (`noc_butterfly`) and the sampler register map

The network has 16 ports:

- ports 0–3 are the EP engines;
- ports 4–15 are the samplers. Engine e owns samplers 4 + 3e … 6 + 3e.

It is built from four stages of eight 2×2 switches. Stage s looks at bit
3 − s of the destination, so after the last stage a flit's channel number
equals its destination. Each switch output has a register, and the two
inputs are arbitrated round robin. Each output port has a 4-deep ejection
FIFO.

All links are valid/ready. A flit is a complete register write, so there are
no multi-flit packets and no wormhole state. With no contention, a flit
takes 5 clocks from injection to ejection.

Flit: `{dst[3:0], src[3:0], addr[7:0], data[31:0]}` (48 bits).

| addr | to a sampler | addr | from a sampler |
|---|---|---|---|
| 0x00+i | cavity mean μ_i | 0x00+i | sample mean of θ_i |
| 0x10+i | cavity precision λ_i | 0x10+i | sample mean of θ_i² |
| 0x20+i | observed value m_i | 0x20 | DONE (data = accepted count) |
| 0x30+i | observation precision τ_i | | |
| 0x40+i | invariant coefficient a_i | | |
| 0x80 | κ | | |
| 0x81 | STEP | | |
| 0x82 | [3:0] log₂ kept samples, [31:16] burn-in | | |
| 0x83 | seed | | |
| 0x84 | START, bit 0 = warm | | |

The address map allows D ≤ 16.

## 6. Memory: one replica per channel (`mem_xbar`)

The four DRAM channels each hold a complete copy of the input data:

- A host write is presented to all four channels in the same clock. It is
  accepted only when all four are ready.
- EP engine i reads only channel i, so the engines' record reads never
  contend.
- Host reads use channel 0 and have priority there over engine 0.
- A small FIFO on channel 0 records, in issue order, whether each read came
  from the host or from engine 0, so the in-order responses are returned to
  the right requester.

The bus is a plain valid/ready request (`mem_req_t`: valid, we, addr,
wdata) with in-order single-word responses (`mem_rsp_t`). It stands in for
AXI.

**Slice record** (32-bit words at SITE_BASE[k]): D observed values, then D
observation precisions (0 = not measured), then D invariant coefficients.

## 7. Host interface and timing

The controller (`ep_controller`) is reached through a simple register port.
Writes are one clock; reads are combinational.

| addr | register | reset |
|---|---|---|
| 0x00 | CTRL: write bit 0 = 1 to start a run (g ← prior, all sites reset) | |
| 0x01 | STATUS: bit 0 busy, bit 1 done (= `irq`), bit 2 converged | 0 |
| 0x02 | MAX_ITERS, jobs per engine per run | 4 |
| 0x03 | NSAMP: [3:0] log₂ kept samples, [31:16] burn-in | 10, 256 |
| 0x04 | STEP (Q16.16) | 0.5 |
| 0x05 | KAPPA (Q16.16) | 0 |
| 0x06 | PRIOR_PREC (Q16.16) | 0.1 |
| 0x07 | TOL (Q16.16) | 0.01 |
| 0x08+k | SITE_BASE of slice k (word address) | 32·k |
| 0x0C | DISPATCHED, jobs issued in the last run | |
| 0x0D | NOC_CONFLICTS, arbitration losses in the network since reset | 0 |
| 0x0E | CLAMPS, cavity and variance clamps in all engines since reset | 0 |
| 0x0F | SAMP_BUSY, number of samplers running now | 0 |
| 0x40+i | G_R[i], posterior precision | |
| 0x50+i | G_S[i], posterior shift; mean = G_S/G_R | |

Rewriting SITE_BASE points the accelerator at another set of sample buffers,
for example after a context switch. `irq` stays high until the next start.

**Timing.** A job costs about (BURNIN + 2^LOG2_NSAMP + 1)·(D + 1) clocks in the
samplers plus about 1,000 clocks in the engine. The full-size end-to-end
test uses 512 burn-in, 8,192 kept samples and 5 jobs per engine. A run takes
396,618 clocks, which is 1.6 ms at the 250 MHz target clock. The default
register values (256 + 1,024 samples, 4 jobs) give about 50,000 clocks,
0.2 ms.

**Number formats.**

- Values, precisions and shifts are Q16.16. Their range is ±32768 and
  their resolution is 1.5·10⁻⁵.
- Energies and sample sums are 48-bit Q32.16.
- Multiplications saturate.

Precisions much below 0.01 lose relative accuracy. At 0.001 the 65-LSB
precision gives about 1 % error in the mean derived from it. Scale the
measurements so that events are O(1)–O(1000).

## 8. How this relates to the published design

**Follows the published design:**

- the split into a controller, 4 EP engines and 12 samplers;
- a 16-port butterfly network;
- four DRAM channels with the inputs replicated for concurrent reads;
- engines running lines 3–6 of the EP loop in parallel, with the controller
  doing the global update and re-dispatching to idle engines;
- Gaussian measurement error and a Gaussian mean-field approximation;
- warm-started chains, with engines setting the sampler seeds;
- MMIO-set buffer addresses, a completion interrupt and a 250 MHz target.

**Choices made here, where the published description gives no detail:**

- natural-parameter arithmetic and Q16.16 fixed point;
- D = 8 events per run;
- the sampler algorithm: Metropolis with the scaled uniform proposal and the
  Mitchell-log accept test. The originals come from a sampler generator
  that is not described;
- the invariant as one quadratic linear-relation factor per slice;
- xorshift random numbers;
- switch design, flit format and FIFO depth;
- the static allotment of three samplers per engine;
- the record layout and all register maps;
- the clamping rules;
- the stop rule on |Δ| < TOL.

**Departures:**

- The global approximation g lives in controller registers, not in DRAM. At
  D = 8 it is 16 words.
- The measurement model is Gaussian with a precision supplied by the host.
  The published model derives a Student-t marginal from repeated samples.
  The host can fold that into τ, but the heavier tails are not modelled.
- A plain valid/ready memory bus replaces AXI.
- The model's parameters (measurement precisions τ, invariant weight κ and
  coefficients) are supplied by the host. The published method also
  infers such parameters at run time and picks them by maximum
  likelihood; that outer loop is not built.
- The result read by the host is the global approximation g, not the
  individual site approximations g_k. The sites stay inside the engines.
- The sampler makes its own accept/reject decision and keeps its own chain
  state. In the published design the EP engine drives the sampler
  pipelines directly: it sets the seeds and also writes back each state
  that passes the rejection test. Here the engine only sets the seeds, the
  sampler configuration and START (warm or cold).
- The network allows any port to reach any other, sampler to sampler
  included, but the samplers built here never talk to each other. The
  published samplers need that path for their own generated control.
- Input data is a few words per slice (3·D), not a large buffer of raw
  counter samples. The published design sizes its replicated inputs at
  about 100 MB; the 32-bit word address used here reaches 16 GB per
  channel.
- No PCIe endpoint, DMA or CAPI logic is included, and neither is any host
  software. The host software covers event scheduling with Markov blankets,
  the perf-compatible shim and the ring buffers.

**Sizes.** At D = 8 the design holds small event sets:

- It holds the textbook case of six events multiplexed on three counters,
  and anything up to eight events in a window of four slices.
- It does **not** hold the 10–35-event and 32-event sets used in the
  published evaluations.
- D is a parameter, but the sampler and result address maps limit it
  to 16. Going beyond that needs a wider `addr` field in the flit.

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_urng` | bit-exact xorshift sequence against a reference model; seed load; zero seed |
| `tb_fx_div` | random and edge-case Q16.16 quotients, saturation, 49-clock latency |
| `tb_noc_butterfly` | random traffic from all ports: every flit delivered once, to the right port, in order per source/destination pair; contention and back-pressure; 5-clock unloaded latency |
| `tb_mcmc_sampler` | sample means and variances against closed-form Gaussian posteriors (independent events, a strong invariant, a warm restart); D+1 clocks per sample |
| `tb_ep_engine` | record reads, cavity, flits to the samplers, Δ against exact moments (sampler models reply with exact Gaussian moments), warm start, convergence flag, clamping |
| `tb_ep_controller` | register map, g always equal to a reference model, round-robin service, job counts, stop on convergence, interrupt |
| `tb_mem_xbar` | write replication into 4 channel models, concurrent per-channel reads, host/engine response routing |
| `tb_bayesperf_acc` | whole accelerator at default sizes (see below) |

`tb_bayesperf_acc` runs the complete accelerator at full size:

- 4 engines, 12 samplers, 4 behavioural DRAM channels;
- 4 slices, each measuring 3 of 8 events with overlap.

It has three runs:

1. The posterior means are compared with the closed-form answer (within
   0.25) and the precisions too (within 0.6–1.5×).
2. The buffers are re-pointed to new data with a strong invariant. The
   means must follow the data, and the invariant must pull the two tied
   events together.
3. A large tolerance is set, and the run must stop early as converged.

The test also counts each mechanism and fails if one never happens:

- replicated writes, host reads, concurrent engine reads;
- parallel engines, global updates, warm starts, network contention;
- early stop, re-pointing, interrupts.

It takes a few seconds in Verilator.

Simulate any testbench with plain Verilator 5, from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing -Irtl -Itb rtl/bp_pkg.sv tb/tb_bayesperf_acc.sv \
          --top-module tb_bayesperf_acc -Mdir obj_tb
./obj_tb/Vtb_bayesperf_acc
```

`tb/dram_model.sv` is a behavioural DRAM channel for simulation only. It has
8-clock read latency and random stalls.

## 10. Files

- `rtl/bp_pkg.sv` holds the sizes, fixed-point helpers, flit and bus
  structs, and register addresses.
- `rtl/urng.sv`, `rtl/fx_div.sv`, `rtl/mcmc_sampler.sv`, `rtl/ep_engine.sv`
  and `rtl/ep_controller.sv` are the compute blocks.
- `rtl/noc_fifo.sv`, `rtl/noc_switch.sv` and `rtl/noc_butterfly.sv` make up
  the network.
- `rtl/mem_xbar.sv` is the memory crossbar.
- `rtl/bayesperf_acc.sv` is the top level.
