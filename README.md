# Bi-SamplerZ: a dual-path discrete Gaussian sampler for Falcon signing

Falcon signs by running a randomized nearest-plane algorithm (fast Fourier
sampling). At every leaf of its recursion it needs two integer samples,
`z0 ~ D(Z, t0, sigma')` and `z1 ~ D(Z, t1, sigma')`: discrete Gaussians with the
same width `sigma'` and two different, arbitrary real centers. The routine that
produces one such sample, SamplerZ, works by rejection: it draws a candidate
from a fixed half-Gaussian, moves it next to the center and keeps it with a
probability that corrects the shape. Roughly every other trial is thrown away,
and SamplerZ dominates signing time.

This RTL computes both samples of a leaf as one *task*. It has two complete
trial datapaths (left and right), one per center, and shares everything that
is needed only once per task or that is cheap to time-share: the task setup,
the base sampler, the random number generator and the final adder. The two
paths do not simply run side by side. When one path has its sample and the
other has just rejected, the finished path turns around and works on the other
center too, so the second sample is then pursued by two trials at once. This
*assistance mechanism* is the part of the design that needs the most care, and
it is described in detail below.

All arithmetic follows Falcon's reference SamplerZ (constant-time integer
version): the same base table, the same polynomial for `exp`, the same
byte-serial Bernoulli test. The distribution of the outputs is therefore
Falcon's, given a good random source.

## Task interface

`bi_samplerz` takes IEEE-754 doubles and returns doubles.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `start` | in | 1 | one-cycle pulse while `ready`: begin a task |
| `restart` | in | 1 | with `start`: reseed the PRNG first (first call of a signature) |
| `seed` | in | 256 | ChaCha20 key used at a reseed |
| `mu_l`, `mu_r` | in | 64 | the two centers (double) |
| `isigma` | in | 64 | `1/sigma'` (double), as Falcon's reference code passes it |
| `ready` | out | 1 | the task queue entry is free, a task may be handed over |
| `done` | out | 1 | one-cycle pulse, `z_l`, `z_r` valid (held until the next task ends) |
| `z_l`, `z_r` | out | 64 | the samples, integer-valued doubles |
| `state` | out | 4 | controller state (`bisz_pkg::state_t`), for observation |

The inputs are registered at `start`. An idle sampler begins the task at
once. A task handed over while another runs waits in a one-entry queue
(`ready` is low while it is occupied) and begins in the cycle the running
task finishes, without passing through IDLE; results come out in task order.
Requirements: `sigma_min <= sigma' <=
1.8205` and `|mu| < 2^31`. The build parameter `SIGMA_MIN` selects the
parameter set: `bisz_pkg::SIGMA_MIN_512` (default, 1.1165085...) or
`bisz_pkg::SIGMA_MIN_1024` (1.2982803...).

The published design plugs into the task and memory interface of an existing
full Falcon signer. That interface is not reproduced: here a task is simply
three doubles on ports.

## One trial, in fixed point

Inside, every real quantity is an unsigned 81-bit number scaled by 2^72
(9 integer bits, 72 fraction bits). An 81x81 product keeps bits [152:72] of the
162-bit result (`mul81`). Nothing in a trial needs more than 9 integer bits
because `sigma'` is confined to Falcon's narrow range.

For a center `mu` with `r = mu - floor(mu)` a trial is:

1. **Base sample** (`basesampler`): `z0` in 0..18 from a 72-bit uniform `u`,
   `z0 = #{i : u < RCDT[i]}` over Falcon's 18-entry reverse cumulative table,
   and a sign bit `b` from the next random byte.
2. **Candidate** (`bef_loop`): `z = b + (2b - 1) z0`, i.e. `z0 + 1` or `-z0`.
   The distance to the fraction is formed without signed arithmetic:
   `|z - r| = (z0 + 1) - r` if `b = 1`, else `z0 + r`, which is just the bit
   concatenation `{z0, r}`.
3. **Exponent** (`bef_loop`): `x = (z - r)^2 / (2 sigma'^2) - z0^2 / (2 sigma_max^2)`.
   `1/(2 sigma'^2)` comes from the task setup; the second term depends only on
   `z0` and is a 19-entry table `T[z0]`, formed in the RTL as the constant
   `z0^2 * floor(2^72 / (2 * 1.8205^2))`, which synthesis folds into a table.
   Then `s = floor(x / ln2)` (multiplication by `1/ln2` and one correction step
   so that the remainder lands in `[0, ln2)`), `r' = x - s ln2`, handed on as
   `z63 = floor(2^63 r')`, and `s' = min(s, 63)`.
4. **ApproxExp** (`for_loop`): `y ~ 2^63 * ccs * exp(-r')` with
   `ccs = sigma_min / sigma'`, by Horner's rule over Falcon's 13 coefficients:
   `y = C0; y = Ci - (z63 * y >> 63)` twelve times, then `y = ccs * y >> 63`.
   One 64x64 multiplier (`mul63`) does all 13 products, one per clock.
5. **Bernoulli test** (`berexp_cmp`): accept with probability
   `ccs * exp(-x)`: the threshold is `t = (2y - 1) >> s'`; random bytes are
   compared with `t` from its most significant byte down, and the test stops at
   the first byte that differs (usually the first). Accept if the random value
   is below `t`.
6. **Result** (`fpr_adder`): `floor(mu) + z`, returned as a double.

The task setup (`pre_samp`, once per task) converts the doubles with
`flt272int` (exact: the fixed-point form of a double with |d| < 512 is a plain
shift of its mantissa), splits each center into `floor(mu)` and `r`, and forms
`ccs = SIGMA_MIN * isigma` and `isigma^2 / 2 = 1/(2 sigma'^2)`. It borrows the
two 81-bit multipliers that the two `bef_loop`s otherwise use.

`ccs` is clamped to `1 - 2^-72`. Mathematically it never exceeds 1, but at
`sigma' = sigma_min` the rounded `isigma` can make the fixed-point product a
few units of the last place larger than 1. ApproxExp then returns slightly
more than `2^63` for `r' = 0`, `2y - 1` wraps around in 64 bits, and the trial
with `x = 0` (candidate 0 for an integer center) would be rejected instead of
accepted. The end-to-end edge-case test found exactly this.

## The two paths and what they share

```
             seed ─► chacha20 ──► refill_control (left)  ─┐ 10 B base draw / 1 B Bernoulli
                                └► refill_control (right) ─┤
                                                           ▼
   task regs ─► pre_samp ◄──► MUL81_L, MUL81_R ◄──► bef_loop L ─► for_loop L ─► berexp_cmp L ─┐
                   │                 ▲                                                     │
                   │                 └────────────► bef_loop R ─► for_loop R ─► berexp_cmp R ─┤
              r_l, r_r, floor, ccs, 1/(2σ'^2)              ▲                                     ▼
                                         basesampler (z0,b for both paths)      bisz_ctrl ─► fpr_adder ─► z_l, z_r
```

Per path: one `bef_loop` (trial preparation), one `for_loop` (ApproxExp), one
`berexp_cmp` (Bernoulli test) and one random byte buffer. Shared: `chacha20`,
`pre_samp`, the base sampler (it draws for both paths in the same cycle), the
two `mul81` (each owned by one path's `bef_loop` except during task setup) and
the final adder (one integer adder used for the left, then the right result).

**Randomness.** `chacha20` is the RFC 8439 block function with one round per
clock (22 clocks per 64-byte block). Its key is
`seed`, the block counter restarts at 0 at every reseed and the nonce is zero.
Each path has a 128-byte FIFO (`refill_control`) that asks for a new block
whenever 64 bytes are free; when both ask, the left one is served first and the
two then alternate. A base draw takes 10 bytes from each buffer at once
(72 bits of `u`, then one byte whose low bit is `b`); the Bernoulli test takes
one byte per clock. Because each path's bytes come from its own buffer and are
used strictly in keystream order, the two paths never share a random byte.

**Base sampler.** The comparator array `u < RCDT[i]` yields a thermometer
code (all ones, then all zeros, since the table is decreasing). Instead of
adding up the 18 bits, the position of the single 1-to-0 transition is
detected and selects a constant: `sel[0] = !c[0]`, `sel[i] = c[i-1] & !c[i]`,
`sel[18] = c[17]`, and `z0 = OR_i (sel[i] ? i : 0)`. This is one level of AND
gates and an OR tree; the published design draws the same selection as a
tri-state bus, which an FPGA or standard-cell flow would turn into the same
AND-OR structure.

## Controller and the assistance mechanism

`bisz_ctrl` has the states IDLE, INIT, PRE, NREG, NLOOP, SWITCHL, SWITCHR,
ALOOP and F_ADD.

- **INIT** (only with `restart`): flush the buffers, rekey ChaCha20, wait until
  both buffers can serve a base draw, draw the first pair.
- **PRE**: run the task setup; as soon as it is done, each `bef_loop` prepares
  a trial for its own center.
- **NREG**: the prepared trials (`z`, `z63`, `s'`) are latched into the loop
  registers and the `for_loop`s start. From here on the `bef_loop`s are free
  again and immediately prepare the *next* trials (with new base samples)
  while the current ones are being tested. This overlap is what hides the trial
  preparation behind the test.
- **NLOOP**: both paths test a trial for their own center. Once both tests have
  decided:
  - both accept: write both results, go to F_ADD;
  - neither accepts: go back to NREG with the trials already prepared;
  - only one accepts: write its result and go to SWITCHR (left accepted) or
    SWITCHL (right accepted).
- **SWITCHL / SWITCHR**: the path that is finished has, in its `bef_loop`, a
  trial it prepared for its *own* center, which is now useless for it. That
  trial's base sample `(z0, b)` has not been tested, so it is re-prepared for
  the other center (a new `x` for the other `r`); no new randomness is drawn
  and no candidate is thrown away. The rejected path's own next trial is
  already in preparation for that center.
- **ALOOP**: both paths test trials for the one open center. If either
  accepts, the result is written (the left trial wins if both accept) and the
  task goes to F_ADD; otherwise both `bef_loop`s, already busy with further
  trials for that center, lead back through NREG into ALOOP.
- **F_ADD**: the final adder forms both doubles; `done` pulses; on to the
  queued task (INIT or PRE) if there is one, else IDLE.

Why this is sound: every trial is an independent draw from the same proposal
distribution, and a sample is the first accepted trial for its center. Which
trial is "first" among two that run in parallel must not depend on anything
correlated with the outcome. Two rules in the RTL ensure that:

- A round is judged only after *both* Bernoulli tests of the round have
  decided. The test length depends on the random bytes and on `t`, i.e. on the
  candidate, so picking whichever path finishes first would bias the output.
- In ALOOP a fixed rule (left wins) decides between two accepting trials.

Trials left over when a task ends are kept. Each path remembers whether its
`bef_loop` holds an untested trial, for which center (left/right) and whether
it was prepared with the current task's setup. A new task restarts each
`bef_loop` with its untested base sample (re-prepared for the new task's
center) instead of drawing a new one; base samples are drawn only when both
paths have used theirs, and only when both buffers hold at least 10 bytes and
no Bernoulli test is reading.

## Timing

All units run at one clock; the multipliers are single-cycle combinational
blocks, so the design has long paths through the 81x81 and 64x64 multipliers
and would need pipelined multipliers to reach a high clock.

| unit | cycles, start to done |
|---|---|
| `chacha20` block | 22 |
| `pre_samp` | 2 |
| `bef_loop` | 5 |
| `for_loop` | 14 |
| `berexp_cmp` | one cycle per byte used (usually one), decision one cycle after the deciding byte |
| `fpr_adder` | 3 |
| SWITCHL/SWITCHR | 6 |

A task whose first two trials both accept takes **30 cycles** from `start` to
`done`. Measured over 2000 tasks at `sigma' = 1.5` the average is about
**55 cycles**; at `sigma' = 1.75` with the Falcon-1024 `sigma_min`, about
**48.5 cycles** (the acceptance rate grows with `sigma'`). For a Falcon-512
signature (512 tasks) that is about 28,000 cycles of sampling.

## Where this RTL departs from the published design

- **Cycle counts.** The published design reports 59 cycles for a pair without
  rejection and 106 expected; it spends 19 cycles in task setup, 34-41 in a
  test round and 7-9 in the switch. Its pipeline depths are not given, so all
  latencies here are this design's own, with single-cycle multipliers.
- **Final adder.** The published adder keeps floating-point constants for the
  candidates in a table and uses a floating-point adder. Here `floor(mu)` is
  already an integer after conversion, so the sum is formed on integers and
  converted to a double by normalising on its leading one. The result is
  the same, bit for bit.
- **Subtractor sharing.** The published `For_loop` shares its 63-bit
  subtractor with the Bernoulli comparison; here each has its own.
- **Bernoulli units.** Each path has its own comparison unit. The published
  block diagram shows that; one sentence of its text says only the trial
  preparation and ApproxExp are duplicated. The diagram was followed.
- **Threshold.** The comparison uses Falcon's `(2y - 1) >> s`; one listing of
  the published algorithm writes `2y >> s`.
- **ApproxExp coefficients.** The full Falcon table is used; the published
  listing abbreviates it and its first entry differs from Falcon's
  `0x00000004741183A3` by what looks like a typo.
- **Base sampler draws during task setup.** When a task starts with no
  untested trials left, the base sampler draws while the setup runs; the
  published activity table shows the base sampler idle in that state.
- **Random source.** Falcon seeds its sampler PRNG from SHAKE256. Here the
  256-bit ChaCha20 key is a port and the nonce is fixed at zero; deriving the
  key is left to the surrounding signer.
- **Task queue.** The published controller goes from F_ADD straight to the
  next task when its task queue holds one; the queue itself is part of the
  signer's interface and not described. Here it is a single entry.
- **Task interface.** Plain ports instead of the signer's task and memory
  interface (see above). The task decoder of the published design is therefore
  absent.
- **Constants** not printed in the published description are taken from the
  Falcon specification: the RCDT table, `sigma_max = 1.8205` and both
  `sigma_min` values.

## Files

| file | content |
|---|---|
| `rtl/bisz_pkg.sv` | fixed-point types, RCDT, ApproxExp coefficients, constants, `T[z0]` function, state encoding |
| `rtl/bi_samplerz.sv` | top level: task registers, PRNG and buffers, the two paths, result registers |
| `rtl/bisz_ctrl.sv` | state machine and trial bookkeeping |
| `rtl/chacha20.sv`, `rtl/refill_control.sv` | random source and per-path byte buffer |
| `rtl/basesampler.sv` | shared RCDT base sampler |
| `rtl/flt272int.sv`, `rtl/pre_samp.sv` | double to 9.72 fixed point, task setup |
| `rtl/mul81.sv`, `rtl/mul63.sv` | fixed-point multipliers |
| `rtl/bef_loop.sv`, `rtl/for_loop.sv`, `rtl/berexp_cmp.sv` | the three trial stages of a path |
| `rtl/fpr_adder.sv` | final addition, result as double |
| `tb/tb_<unit>.sv` | self-checking unit tests |
| `tb/tb_bi_samplerz.sv` | end-to-end test at default parameters (Falcon-512) |
| `tb/tb_bi_samplerz_1024.sv` | end-to-end test built for Falcon-1024 |
| `tb/tb_bi_samplerz_edges.sv` | end-to-end test at `sigma' = sigma_min`, `sigma' = sigma_max`, integer and near-integer centers, large floors, equal centers |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_bi_samplerz \
    -Irtl -y rtl -y tb +libext+.sv rtl/bisz_pkg.sv tb/tb_bi_samplerz.sv -o sim
./obj_dir/sim
```

Replace `tb_bi_samplerz` with any other testbench name. The unit tests compare
against independent models written in the testbench (RFC 8439 vectors for
ChaCha20, the plain counting definition for the base sampler, real arithmetic
for the fixed-point stages, a byte-queue model for the buffers, a cycle model
of the datapath for the controller). The end-to-end tests run 2000 tasks and
check the mean, variance and histogram (chi-square) of both outputs against
the exact discrete Gaussian, the 30-cycle fast path, and that every control
path above (reseed, both accept, both reject, SWITCHL, SWITCHR, an assisted
round that succeeds and one that fails, reuse of a leftover trial) occurred.
The last 200 tasks are handed over back to back, through the task queue. A
third end-to-end test checks the histograms at the edges of the input range.
They all run in a few seconds.

## How far to trust it

The statistical tests show the outputs follow `D(Z, mu, sigma')` to the
resolution of 1500 to 2000 samples per center, for a dozen centers and five
widths including both ends of the allowed range; they do not prove the
absence of small biases. The fixed-point stages are checked
exactly or to 1e-12 against real arithmetic over the full input ranges. No
gate-level synthesis, timing closure or side-channel (constant-time) analysis
has been done: in particular the Bernoulli test's length and the number of
trials are visible in the latency, as they are in Falcon's reference code.
