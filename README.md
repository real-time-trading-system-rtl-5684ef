# An FPGA stock-selection engine built on simulated bifurcation

This design reacts to every change in the best ask or bid of any stock in a
universe of N = 128 stocks. On each change it picks a group of Ns = 4 stocks
to trade: two to buy and two to sell. The group is chosen so that:

* each stock's mid price is far from its volume-weighted average price
  (VWAP), which is the expected return;
* the stocks are weakly correlated with each other;
* the group is delta neutral: as many long positions as short ones.

Finding the best group is a quadratic binary optimisation. The engine maps
it to an Ising problem and solves it in hardware with **ballistic simulated
bifurcation (bSB)**. In bSB, N coupled oscillators are integrated for a fixed
number of steps, and the signs of their final positions are the answer.

A judgment stage then opens a passing group, as long as none of its stocks is
already open and the position limit allows it. For each of the Ns stocks it
emits one order record with a side, a lot count and a sequence number.

The whole FPGA part is written in synthesizable SystemVerilog (IEEE
1800-2017). Its default parameters are the published configuration. A
self-checking testbench runs that full-size top through feeds, VWAP updates,
openings, rejections and closes.

The network receiver and transmitter, the PCIe interface and the host
software are not part of the RTL. Their streams appear as valid/ready ports
on the top.

## 1. The selection problem and how it is split

Let b_i = 1 if stock i is selected. Its price deviation is

    dp_i = (mid_i - VWAP_i) / pbase_i,    mid_i = (ask_i + bid_i) / 2

where pbase_i is the stock's base price for the day. A negative dp means the
stock is cheap, so the candidate side is BUY. A positive dp means SELL.
sigma_ij in [0,1] is a correlation factor that the host computes once a day.

The cost is

    H = -c1 sum_i |dp_i| b_i                  expected return
        + sum_{i!=j} sigma_ij b_i b_j          correlation
        + c2 (sum_i b_i - Ns)^2                select exactly Ns stocks
        + c3 (sum_i sgn(dp_i) b_i)^2           delta neutral

The spins are s = 2b - 1. Under that substitution the Ising couplings and
fields fall into two parts that change at very different rates:

| part | formula | changes | stored as |
|------|---------|---------|-----------|
| J^day_ij  | -(sigma_ij + c2)/2 for i != j, 0 on the diagonal | once a day | N x N, spread over the MMTE blocks |
| h^day_i   | (sum_{j!=i} sigma_ij + c2 (N - 2Ns)) / 2 | once a day | N words |
| J^tick_ij | -(c3/2) sgn_i sgn_j | every quote | only the N signs sgn_i |
| h^tick_i  | -c1 abs(dp_i)/2 + c3 (sum_j sgn_j / 2) sgn_i | every quote | N words |

This split is the central trick of the design. When a quote changes, only
O(N) numbers are rewritten, never the N x N matrix.

J^tick has rank one, so its product with x needs just one scalar per step:

    dY = sum_j sgn_j x_j

Each oscillator then applies the tick force

    f_tick_i = -(c3/2) sgn_i (dY - sgn_i x_i)

## 2. Data flow through the FPGA part (`trading_fpga_top`)

Every arrow below is a `fifo_channel`: a synchronous valid/ready FIFO,
16 deep by default. All modules are independent state machines on one clock.

    feed ─► price_buffer ─tick events─► sbm_module ─candidates─► judge ─requests─► msg_gen ─► orders
                                           ▲   ▲                   ▲   │
                              VWAP updates ┘   └─ open list, ──────┘   └ close confirmations
                                                  verdicts

* **price_buffer** holds ask[N] and bid[N]. It forwards a stock index only
  when a feed actually changes that stock's quote. Repeated quotes cost
  nothing downstream.
* **sbm_module** owns four memories:
  * sigma (N x N, Q7.24);
  * VWAP (N words);
  * 1/pbase (N words);
  * dp (N words).

  It runs the preprocessing, the SB core and the postprocessing, as
  described in sections 3 to 5.
* **judge** keeps the open list O as an N-bit vector. It accepts a group only
  if all of these hold:
  * trading is enabled;
  * open + Ns <= Pmax;
  * none of the group's stocks is open.

  It marks the stocks open *before* emitting the order requests. A close
  confirmation removes one stock from O, and close confirmations take
  priority over candidates.
* **msg_gen** attaches the lot count, taken from a table the host writes,
  and a running sequence number.

Host-side inputs stand in for the PCIe register path:

* `cfg`, a struct of run-time parameters;
* `host_we`/`host_wr`, writes to sigma, 1/pbase and lots;
* `day_prep`, which builds J^day and h^day from sigma;
* `seed_load`.

## 3. The SBM controller: when to run and when to skip work

`sbm_module` is event driven:

* **IDLE.** The controller drains the VWAP channel and the tick-event
  channel:
  * a VWAP word updates the VWAP memory;
  * a tick event re-arms `cfg.n_run` runs.

  Either one marks the problem *dirty*. So does any change of the open
  list, whether an opening or a close. A pending `day_prep` is served here
  too. When the channels are empty and runs remain, a run starts.
* **RUN.** If the problem is dirty, the tick preprocessing runs first and
  clears the flag; otherwise it is skipped. So a repeat run on unchanged
  data goes straight to the SB core. Each run starts from new random
  momenta, because the random generators are never reseeded between runs.
  Then comes postprocessing.
* **CAND.** A passing group goes to the judge. The controller waits for the
  verdict. An accepted group changes the open list, and the next run
  therefore repeats the preprocessing with the new stocks' dp forced to 0.

Anything that arrives during a run waits in the FIFOs and is taken in at the
start of the next run. The price buffer keeps only the newest quote per
stock, so a burst of feeds during a run costs one preprocessing, not many.

`stats` counts:

* feeds and events;
* runs, and runs with and without preprocessing;
* passing groups, accepts and rejects;
* closes and day preprocessings.

## 4. The SB core (`sb_core`)

### 4.1 Algorithm

Each oscillator has a position x_i and a momentum y_i. One step is:

    f_i  = sum_j J^day_ij x_j - h^day_i - h^tick_i + f_tick_i
    y_i += dt*c0 * f_i - damp * x_i         damp = dt*(a0 - a(t))
    x_i += dt*a0 * y_i
    if |x_i| > 1:  x_i = sgn(x_i), y_i = 0  (inelastic wall)

* The pump a(t) rises linearly from 0 to a0 over `n_step` steps. In
  hardware, `damp` starts at `dt_a0` and drops by `damp_dec` each step,
  floored at 0.
* All products within one step use the positions from the previous step.
* After the last step, spin i is +1 when x_i > 0.

### 4.2 Structure

The core is built from three kinds of unit:

* **M = 8 MMTE blocks** (`mmte`). Each owns R = N/M = 16 oscillators. It
  holds:
  * its R rows of J^day, stored as R*C words of L values, where C = N/L;
  * a **JX** unit: L = 16 multipliers and an adder tree;
  * a two-stage **TE** unit (`te_unit`);
  * local X, Y, H^day and H^tick memories.
* **X' memory** (`xprime_mem`). This is the global position memory. It is
  double-buffered:
  * all JX units read L positions per cycle from the current bank;
  * each TE writes its updated x into the next bank;
  * the banks swap, combinationally, in the cycle that ends a step.
* **MAC-tick** (`mac_tick`). It holds the N signs and sums sgn_j x_j over
  the same L-wide broadcast during the first row pass of each step. dY is
  therefore complete before any TE needs it.

### 4.3 Schedule of one step

For each row r = 0..R-1 and each chunk c = 0..C-1, chunk c of X' is
broadcast to all M JX units and to MAC-tick. Block m accumulates row
m*R + r.

* The row sum is registered one cycle after the row's last chunk.
* It then passes through the two TE stages.
* Four clock edges after the last chunk, the new x lands in X' and the new
  x and y land in the local memories.

When the last row has drained, the banks swap and the damping is lowered.

| quantity | cycles |
|---|---|
| one step | R*C + 5 = 133 |
| initialisation | R + 3 = 19 |
| run of 300 steps | 39,919 |

The published core needs 110 cycles per step. Its lane organisation is not
given, and M and L here are this design's choices.

The initial state is x = 0, with y uniform in [-1/8, 1/8). y comes from a
per-block xorshift32 generator whose seed is `cfg.seed` mixed with the
block number.

## 5. Preprocessing and postprocessing

**Day preprocessing** (`sbm_pre`, `start_day`) reads one sigma element per
cycle and writes J^day, accumulating h^day. It takes N*N + 1 cycles, once a
day.

**Tick preprocessing** (`start_tick`) makes two passes over the stocks:

* Pass A computes dp_i, sgn_i and S = sum sgn_i. dp_i is forced to 0 for
  open stocks and for stocks that have not yet been quoted on both sides.
* Pass B computes h^tick_i, which needs the finished S.

It takes 2N + 1 = 257 cycles. The published figure is 129.

**Postprocessing** (`sbm_post`) reads the sign of every final x. A group
passes if all of these hold:

* exactly Ns spins are +1;
* the signs of the selected dp sum to 0;
* no selected dp is 0;
* H_cost <= `cfg.cost_thr`, where
  H_cost = -c1 sum |dp_i| + sum_{i!=j} sigma_ij over the group.

It takes N + Ns^2 + 2 = 146 cycles. The published figure is 648.

## 6. Number formats and configuration

| quantity | format |
|---|---|
| x, y, J, h, dp, sigma, c1..c3, dt*c0, dt*a0 | Q7.24 signed, 32 bit (`fix_t`) |
| ask, bid | unsigned 32-bit price ticks |
| VWAP | Q24.8 ticks |
| 1/pbase | UQ0.32, written by the host as round(2^32 / pbase) |
| lots | 32-bit integer per stock, from the host |

Products are 64-bit, rounded toward minus infinity and saturated back to 32
bits (`sbm_pkg::fmul`, `sbm_pkg::sat`).

These settings produce balanced four-stock groups in the testbenches:

| field | value | meaning |
|---|---|---|
| `dt_c0`, `dt_a0` | 0.1 (`32'h0019999a`) | dt = 0.02, a0 = c0 = 5 |
| `damp_dec` | `32'h000015d8` | = dt*a0 / 300 |
| `n_step` | 300 | |
| `c1` | 100 | |
| `c2`, `c3` | 0.5 | |
| `cost_thr` | 0 | |
| `n_run` | 2 | |
| `pmax` | 4 | |

c1 scales the small dp values, about 1e-3, up to the size of the
correlation terms.

## 7. Departures from the published design

* **Arithmetic.** The published core computes in 32-bit floating point.
  Here every quantity is Q7.24 fixed point. With |x| <= 1 and the problem
  scaled as above, the range is ample. Rounding differs, so trajectories
  are not bit-identical to a float model.
* **Sign of the tick force.** The published appendix writes the momentum
  correction as +(c3/2)(dY - x_i) sgn(dp_i) - h^tick_i. That is the
  opposite sign to the one the delta-neutral penalty produces through the
  Ising mapping. Its self term is also sgn_i x_i, where the mapping gives
  sgn_i^2 x_i: the force on an oscillator must not include its own
  contribution to dY. This design uses
  -(c3/2) sgn_i (dY - sgn_i x_i), which does minimise the penalty.
* **Cycle counts.** 133 cycles per step instead of 110, 257 for tick
  preprocessing instead of 129, and 146 for postprocessing instead of 648.
  A full run is about 40,320 cycles. At the published 208 MHz that would be
  about 194 us, against the published 162 us. No timing closure was done
  for this RTL, so the 208 MHz figure is the publication's, not a result.
* **Rank-one J^tick.** J^tick is stored as N two-bit signs rather than as a
  matrix.
* **Controller policy.** The paper describes the event flow but not these
  choices, which are this design's:
  * exactly how many runs a tick event re-arms;
  * that the controller waits for the judge's verdict;
  * that VWAP updates are applied only between runs.
* **Order record.** The record is {seq, idx, side, lots}. The exchange
  protocol belongs to the transmitter, which is not built.

## 8. Files

| file | role |
|---|---|
| `rtl/sbm_pkg.sv` | types, fixed-point helpers, configuration and statistics structs |
| `rtl/fifo_channel.sv` | valid/ready FIFO joining the modules |
| `rtl/price_buffer.sv` | ask/bid list, change detection |
| `rtl/sbm_pre.sv` | day and tick preprocessing |
| `rtl/te_unit.sv` | bSB time-evolution pipeline with the tick force |
| `rtl/mmte.sv` | J^day rows, JX adder tree, TE, local memories |
| `rtl/mac_tick.sv` | sign memory and dY accumulator |
| `rtl/xprime_mem.sv` | double-buffered global position memory |
| `rtl/xorshift32.sv` | random generator for initial momenta |
| `rtl/sb_core.sv` | MMTE loop and step sequencer |
| `rtl/sbm_post.sv` | constraint and cost check, candidate group |
| `rtl/sbm_module.sv` | memories and the event-driven controller |
| `rtl/judge.sv` | open list, accept/reject, closes |
| `rtl/msg_gen.sv` | order records |
| `rtl/trading_fpga_top.sv` | top level |

Each `tb/tb_<module>.sv` drives its module and compares the outputs against
an independent model written in the testbench. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. What they cover:

* `tb_sb_core` checks a 16-spin core bit-exactly against a behavioural bSB
  model, together with the exact cycle count.
* `tb_sbm_pre` and `tb_sbm_post` check the preprocessing and postprocessing
  against direct evaluations of the formulas, and also check their cycle
  counts.
* `tb_trading_fpga_top` uses the default parameters: N = 128, Ns = 4,
  M = 8, L = 16. It runs the whole chain and counts each mechanism:
  * preprocessing done and skipped;
  * feeds and VWAP updates arriving during a run;
  * reprocessing after an opening;
  * rejected groups;
  * closes;
  * back-pressure on the order stream.

  Any mechanism that never happens counts as a failure.

* `tb_workload_latency` also runs at the default size. It times every SBM
  run against the cycle formulas above and measures the delay from one feed
  to the first order. It also sends a burst of 65 feeds during a run and
  checks that none is lost. Measured results:
  * a run with preprocessing takes 40,324 to 40,327 cycles;
  * a run without it takes 40,070 cycles;
  * feed to first order takes 40,336 cycles, which is 193.9 us at 208 MHz;
  * the 65-feed burst costs three preprocessing passes.

## 9. Simulating

With Verilator 5 (two-state: every register the logic reads is reset):

    verilator --binary --timing --assert -Wno-fatal -y rtl \
        rtl/sbm_pkg.sv tb/tb_trading_fpga_top.sv --top-module tb_trading_fpga_top
    ./obj_dir/Vtb_trading_fpga_top

`-y rtl` lets Verilator find each module by its file name. To run another
testbench, replace the testbench file and the top-module name.

The full-size testbench takes a few seconds to build and run. Module
testbenches override N, M and L to small sizes; the top testbench does not.

To change the core's parallelism, set M and L on `trading_fpga_top`. N must
be divisible by both. The step then costs (N/M)(N/L) + 5 cycles.
