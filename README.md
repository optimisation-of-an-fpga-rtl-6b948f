# A dataflow credit default swap pricing engine in SystemVerilog

A credit default swap (CDS) is insurance on a loan. The buyer of protection pays a
yearly premium, the *spread*, and the seller pays out the unrecovered part of the loan
if the borrower defaults. Pricing a CDS means finding the spread at which the
expected premium income equals the expected payout. That expectation depends on two
curves that stay fixed for a whole batch of contracts: a hazard-rate curve, which says
how likely a default is at each point in time, and an interest-rate curve, used for
discounting. A pricing run holds both curves fixed and computes one spread for each of
thousands of contracts ("options").

This RTL implements the accelerator described in *Optimisation of an FPGA Credit
Default Swap engine by embracing dataflow techniques* (N. Brown, M. Klaisoongnoen,
O. Thomson Brown). That work rebuilt a high-level-synthesis CDS engine in a full
dataflow style:

* every step of the calculation is a stage of its own, and all stages run at the same
  time, joined by streams;
* the engine keeps running from one option to the next instead of restarting;
* the two slow steps, integrating the hazard curve and interpolating the interest
  curve, are each replicated six times behind round-robin schedulers;
* a seven-cycle floating-point adder is kept busy by cycling seven partial sums;
* five engines share one device, each pricing its own share of the options.

The paper describes the engine as C++ for high-level synthesis and gives its
structure, not its code or its formulas. The structure here follows the paper. The
pricing formulas, word layouts, handshakes and FIFO depths are this design's own
choices, and each is listed below.

## The pricing model

An option has a maturity `m` (years), a payment frequency `f` (payments per year) and a
recovery rate `R`. The engine evaluates it on a grid of time points:

    t_k = k / f   for k = 1, 2, ...,   with the first point that reaches m replaced by m
    dt_k = t_k - t_{k-1}               (t_0 = 0)

At each time point:

    H(t)   = sum_j h_j * max(0, min(t, T_j) - T_{j-1})     integrated hazard, T_{-1} = 0
    Q(t)   = exp(-H(t))                                     survival probability
    r(t)   = linear interpolation of the interest curve     (end value outside the curve)
    D(t)   = exp(-r(t) * t)                                 discount factor

    payment  += D(t_k) * Q(t_k) * dt_k
    payoff   += D(t_k) * (Q(t_{k-1}) - Q(t_k)) * (1 - R)
    accrual  += D(t_k) * (Q(t_{k-1}) - Q(t_k)) * dt_k / 2

    spread  = 10000 * payoff / (payment + accrual)          basis points

The hazard curve is a step function: entry `j = (T_j, h_j)` holds the rate on
`(T_{j-1}, T_j]`, and the last rate continues past the end. `payment` is the present
value of paying one unit of spread a year. `payoff` is the present value of the
protection. `accrual` is the premium owed for the part of a period that runs before a
default, taking the default to fall in the middle of the period. This is the textbook
form of the model. The paper names these four terms and the order in which they are
computed, but it gives no equations, so these are assumptions. All arithmetic is
IEEE-754 double precision, as in the paper.

## Dataflow structure of one engine

```
 option words ─► option_unpacker ─► time_points ─► FIFO ─► hazard_vector ─► default_prob
 (512 bit)                                                 (6 × hazard_unit)      │ fork
                                  ┌───────────────────────────────────────────────┼────────────────┐
                                  ▼                                               ▼                ▼
                      payment_stage (6 × interp)                 payoff_stage (6 × interp)       FIFO
                                  │                                  │           │ D·(Qprev−Q)     │
                                  │                                  │           └──► FIFO ─► accrual_stage
                                FIFO                               FIFO                            FIFO
                                  ▼                                  ▼                              ▼
                              fp_accum                           fp_accum                       fp_accum
                                  └──────────────► combine_spread ◄──┴──────────────────────────────┘
                                                        │
                                                  result_packer ─► result words (512 bit)
```

`rate_loader` (not drawn) fills the on-chip curve memories before any option is
taken. It writes the hazard curve into the copies inside `hazard_vector` and the
interest curve into the copies inside both interpolation banks.

Between `default_prob` and the accumulators, each token is one time point. A
`tpoint_t` carries `t`, `dt`, the recovery rate and a `last` flag that marks the
option's final point. After the hazard bank the token grows into a `prob_t`, which
adds `Q(t)` and `Q(t_prev)`. The option's data therefore travel with its time points,
so no stage needs a side input for them. Each accumulator closes a group when it sees
`last`, so the streams after the accumulators carry one value per option. The paper's
Figure 2 draws the same split between per-time-point streams and per-option streams.

All streams use a valid/ready handshake. A `stream_fifo` decouples a producer from
its consumer, the way an HLS stream does. `default_prob` sends each token to three
consumers in the same cycle, so it waits until all three FIFOs have room. The payoff
stage also passes `D·(Qprev − Q)` to the accrual stage, so the accrual stage needs no
interpolation of its own. `accrual_stage` joins that stream with the time-point stream
from `default_prob`. Both streams carry the same sequence of points, and an assertion
checks that their option boundaries line up.

## Accumulating at one term per cycle with a seven-cycle adder

This is the least obvious part of the design. It is used in two places: inside every
hazard unit, and in the three per-option accumulators. A double-precision add takes
seven cycles (`fp64_add_pipe`, `LAT = 7`). A running sum `s += x` can therefore take a
new term only every seven cycles, because each add needs the result of the one before.
The original engine's hazard loop ran at that rate.

`fp_accum` splits the sum into seven partial sums that are used in turn. They are held
in the adder pipeline itself: the adder's output is fed back to one of its inputs. In
each cycle the partial sum that leaves the pipeline comes straight back in, plus the
new term if one arrives, or plus zero if not. The seven pipeline stages therefore hold
seven independent sums, and a term can enter in every cycle. Any number of terms works;
there is no padding to a multiple of seven.

After the term marked `last`, the unit drains the pipeline for seven cycles. That
captures the seven partial sums and leaves zeros behind for the next group. It then
adds the seven values one after another, and each of these additions waits the full
latency. The tail costs about 7 + 6·7 ≈ 50 cycles per group. Against a 1024-entry
hazard curve that is about 5 % per time point. The result is the same sum regrouped,
so its last bits can differ from a left-to-right sum. The testbenches compare with a
relative tolerance for this reason.

The paper keeps the seven partial sums in an array, `values[7]`. Keeping them in the
pipeline is an equivalent choice made here.

## Replicated hazard and interpolation banks

For each time point, a `hazard_unit` reads every entry of the hazard curve, one per
cycle, and feeds the overlap terms to its own `fp_accum`. For a 1024-entry curve this
takes about 1024 + 60 cycles. An `interp_unit` also scans the whole interest curve,
keeping the last point at or before `t` and the first point after it, then
interpolates. It takes about 1024 + 4 cycles. All the other stages handle one token per
cycle, so these two scans set the throughput.

`hazard_vector` and `interp_vector` each put `NREP = 6` units behind an `rr_dispatch`
and an `rr_collect`. The dispatcher gives consecutive time points to units 0, 1, …, 5,
0, … in strict turn. If the unit whose turn it is is busy, the dispatcher waits for it
and does not skip to another unit. The collector reads results back in the same order,
so the output order equals the input order without any reordering logic. Six time
points are then in progress at once in each bank.

Each unit needs its own read port. A curve RAM (`rate_ram`) has two read ports, so a
bank of six units holds three copies of its curve, and all copies are written together
while loading. One engine holds nine copies of 1024 × 128 bits: three of the hazard
curve and six of the interest curve.

The paper replicates the interpolation and the hazard calculation six times and says
that dual-ported memories hold the constants. The copy-per-two-units arrangement is
this design's reading of that.

## Running continuously across options

`time_points` takes the next option in the same cycle that the previous option's last
point leaves. The pipeline never drains between options, so the first points of
option n+1 enter the hazard bank while the last points of option n are still being
processed. Only the two ends of the engine count options: `option_unpacker` stops after
`num_options` options, and `result_packer` flushes its last word after `num_options`
results. The stages in between rely on the `last` flag.

The paper instead makes every stage aware of the option count. The effect is the same:
no restart and no drain between options.

## External data formats

The engine moves external data in 512-bit words, the access width the paper uses for
its HBM memory. The layouts are this design's choice.

| stream | word content |
|---|---|
| curves (`cfg_word`) | 4 pairs per word. Pair k is bits `[128k+127:128k]`, with the time (double) in the upper 64 bits and the rate (double) in the lower 64. First ⌈hz_len/4⌉ words hold the hazard curve, then ⌈ir_len/4⌉ words the interest curve. |
| options (`opt_word`) | 2 options per word. Slot k is bits `[256k+255:256k]`: maturity (double) in `[63:0]`, frequency (unsigned) in `[95:64]`, recovery (double) in `[191:128]`. |
| results (`res_word`) | 8 spreads per word, in basis points (double), result k in `[64k+63:64k]`. A partial last word is zero-padded and flagged by `res_last`. |

The curves load once after reset, and again after a `reload` pulse. Options are held
back until loading is complete (`loaded`). After reset or a `start` pulse, the engine
prices `num_options` options and then raises `done`. The curves stay loaded across
`start`.

## Five engines: `cds_top`

`cds_top` places `NUM_ENGINES = 5` engines side by side. The options are independent,
so the host splits them into five chunks. Each engine has its own option stream,
result stream and `num_options`. On the card each engine would reach its own memory
bank.

The curve stream is broadcast to all engines. A word is taken only when every engine
can take it, and each engine then keeps its own copies. `loaded` and `done` are the
AND of the engines' signals. The top's ports are plain vectors, with per-engine
signals packed as `[NUM_ENGINES-1:0][...]`.

## Arithmetic

`cds_pkg` holds the shared types and a double-precision library written as
combinational functions:

* `fp_add`, `fp_mul` and `fp_div` round to nearest even. They match the simulator's
  `real` arithmetic bit for bit in the tests.
* `fp_exp` uses Cody-Waite reduction by ln 2 and a degree-13 Taylor polynomial. Its
  results agree with `$exp` to within about 1e-14 relative error.
* conversions and comparison.

Subnormals are flushed to zero, overflow gives infinity, and NaN is not handled.
Valid curves and options never produce a NaN.

Only the accumulation adder is modelled with its real pipeline depth, because the
accumulation scheme is designed around that depth. The exponentials, divisions and
multiplications inside the stages each complete in a single cycle. A build for an
FPGA would have to pipeline them, which adds latency but does not change the
dataflow. Expect very large combinational logic from synthesis as the code stands:
the divider alone is a 109-bit `/` operator.

## Timing

| quantity | cycles |
|---|---|
| curve load | 1 pair per cycle: about 2048 + 512 for two 1024-point curves |
| hazard unit, per time point | len + ≈ 60 (scan, drain, 6 serial adds) |
| interpolation unit, per time point | len + ≈ 4 |
| engine throughput, steady state | ≈ (len + 60) / 6 ≈ 180 cycles per time point |
| other stages | 1 token per cycle |

An option with maturity `m` and frequency `f` has ⌈m·f⌉ time points. In simulation,
one engine prices six 12-point options (72 time points) on 1024-point curves in 14,079
cycles, about 195 cycles per time point including the pipeline fill. Two engines
sharing the batch need 7,587 cycles, a speed-up of 1.86. The paper reports 1.94 from
one to two engines. The paper does not
give its options' maturities or frequencies, or its clock frequency, so its throughput
figures (options per second) cannot be compared with these cycle counts.

## Where this departs from the paper, and what it leaves out

* **Formulas.** All pricing formulas, the time-point schedule, the step-function hazard
  curve and the flat extrapolation are the standard model, chosen here. The paper
  gives none of them.
* **Option data.** The paper's Figure 2 feeds each option's parameters into the
  probability, payment, payoff and accrual stages separately. Here they travel with
  the time-point token.
* **Accrual input.** Figure 2 draws an arrow from the payoff stage to the accrual stage
  but does not say what it carries. Here it carries the discounted default probability.
* **Option count.** Stages detect option boundaries with a `last` flag instead of
  each counting the options.
* **External memory.** HBM, its AXI master, the PCIe host interface and the host
  program are not part of the RTL. The top exposes 512-bit valid/ready streams and
  control ports where they would connect.
* **Pipelining.** The arithmetic in each stage completes in one cycle, as noted under
  Arithmetic.
* **Own choices.** Reset is asynchronous and active low. FIFO depth is 16. Word layouts
  are as in the table above.

## Files

| file | contents |
|---|---|
| `rtl/cds_pkg.sv` | types (`tpoint_t`, `prob_t`, `option_t`, …) and double-precision functions |
| `rtl/fp64_add_pipe.sv`, `rtl/fp_accum.sv` | 7-cycle adder; interleaved accumulator |
| `rtl/rate_ram.sv`, `rtl/rate_loader.sv` | dual-ported curve store; curve loading from 512-bit words |
| `rtl/option_unpacker.sv`, `rtl/result_packer.sv` | option and result word formats |
| `rtl/time_points.sv` | time-point generation |
| `rtl/hazard_unit.sv`, `rtl/hazard_vector.sv` | hazard integration; six-way bank |
| `rtl/interp_unit.sv`, `rtl/interp_vector.sv` | interest interpolation; six-way bank |
| `rtl/rr_dispatch.sv`, `rtl/rr_collect.sv` | round-robin scheduler and collector |
| `rtl/default_prob.sv`, `rtl/payment_stage.sv`, `rtl/payoff_stage.sv`, `rtl/accrual_stage.sv`, `rtl/combine_spread.sv` | the dataflow stages |
| `rtl/stream_fifo.sv` | stream FIFO |
| `rtl/cds_engine.sv`, `rtl/cds_top.sv` | one engine; five engines |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_cds_scaling.sv` | one against two engines on the same batch |
| `tb/cds_ref_pkg.sv` | reference pricing model in `real` arithmetic, curve generators, word packing |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. Each
one has a watchdog that counts a failure if the test hangs. To build and run one with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cds_pkg.sv tb/cds_ref_pkg.sv tb/tb_cds_top.sv --top-module tb_cds_top
./obj_dir/Vtb_cds_top
```

Replace `tb_cds_top` with any other testbench to run it. The unit testbenches
override sizes, for example 64-entry curves or two or three units per bank, to keep
runs short.

`tb_cds_top` runs the complete accelerator at its default size: five engines, six
units per bank and 1024-point curves. It loads both curves through the broadcast
stream and prices 19 options split 1/2/3/4/9 across the engines, with random
back-pressure on the results. Every spread is compared with the reference model to a
relative 1e-9.

It also counts how often each mechanism occurred and fails if any count is zero:

* options entering an engine while the previous option is still in flight;
* all six hazard units busy at once, and all six interpolation units busy at once;
* accumulation groups whose length is not a multiple of seven;
* short final periods;
* points before the start of the interest curve and past the end of the hazard curve;
* result back-pressure;
* full and partial result words.

The run takes about 27,000 cycles. The Verilator build takes a minute or two, and the
simulation itself takes about a second.

`tb_cds_scaling` runs a one-engine and a two-engine accelerator side by side on the
same curves. Both price the same six options. The test checks every spread and
requires a speed-up above 1.8 from the second engine.

The reference model in `tb/cds_ref_pkg.sv` is independent of the RTL. It uses the
simulator's `real` type and `$exp`, and implements the formulas above directly.
