# LAMA: a 32-user 256-QAM soft-input soft-output massive MU-MIMO detector

In the uplink of a massive MU-MIMO system, a base station with B antennas
receives y = H s + n from U = 32 single-antenna users (UEs), each sending one
256-QAM symbol. The detector has to turn y, the channel H and the noise
level N0 into reliability values (log-likelihood ratios, LLRs) for the
8 bits of every user. A channel decoder can then use these LLRs and, in
iterative detection and decoding, return *prior* LLRs for a second pass.

This RTL implements LAMA (large-MIMO approximate message passing). LAMA is
an iterative detector. In each iteration it splits the MIMO system into 32
independent scalar channels, z_u = s_u + noise, that all share one SINR rho.
It then "denoises" each scalar channel with the exact statistics of the
256-QAM alphabet. Linear detectors such as MMSE ignore the alphabet. LAMA
uses it, and that is what lets it work when B is close to U (for example
32 x 32), where linear detectors lose many dB.

The hardware is organised around two units that each take one slot of
Ts = 36 clock cycles per iteration:

* the **MV unit** (mean and variance estimation) turns z and rho into a
  posterior mean and variance for every user;
* the **IC unit** (interference cancellation) computes the next z with a
  32 x 32 complex matrix-vector product, and updates rho.

The two units would idle half the time on a single problem. Two independent
detection problems (a *pair*) are therefore interleaved: while the MV unit
works on problem 0, the IC unit works on problem 1, and the other way round
in the next slot.

## The iteration

The detector works on the Gram form of the problem. A host computes it
outside the detector, once per channel:

* G = H^H H;
* G~ = I - diag(G)^-1 G, which has a zero diagonal;
* y_MF = diag(G)^-1 H^H y;
* g_u = G_uu / U.

Start with z = s_hat = 0 and rho = 0. For t = 1 .. tmax:

```
MV:  s_hat'[u], tau[u] = posterior mean / variance of s_u given z[u], rho*g_u, priors
     tau_hat = (1/B) * sum_u g_u * tau[u]
     alpha   = z - s_hat                      (Onsager term, uses the *old* s_hat)
     b       = rho * tau_hat
IC:  z       = y_MF + G~ * s_hat' + b * alpha
     tau_d   = theta * tau_hat + (1 - theta) * tau_d(previous)   (damping; tau_hat when t = 1)
     rho     = 1 / (N0/B + tau_d)
```

After tmax iterations the LLR unit turns the final z and rho into 8 LLRs per
user.

The damping factor theta (0 < theta <= 1) helps with correlated channels and
channels whose users have very different path loss. Damping applies only to
the SINR update. The Onsager weight b uses the undamped tau_hat.

## Mean and variance in the bit domain (mv_pam_unit)

Each real dimension of a 256-QAM symbol is a 16-PAM symbol a in
{-15, -13, ..., 15}. It carries 4 bits, and its real and imaginary parts are
handled by identical units. An exact posterior mean needs 16 likelihoods and
a division. This design instead works per bit, in three steps.

1. **Bit LLRs, max-log.** For each bit k, find a0_k and a1_k, the PAM points
   nearest to mu = z whose bit k is 0 and 1. Then

   ```
   Lambda_k = rho*g_u * ((mu - a0_k)^2 - (mu - a1_k)^2) + prior_k
   ```

   This is done by `pam_nearest`, which compares all candidates, and by
   `llr_bit_unit`.

2. **Soft bits.** t_k = tanh(Lambda_k / 2) is the expected value of the
   bit's +-1 representation (x = +1 for bit 1). It comes from a 7-bit-input
   lookup table, `tanh_lut`, whose entry j is round(256 * tanh(j/8)).

3. **Moments as polynomials in t.** The Gray labelling used here is

   ```
   a = x0 * (8 - x1 * (4 - x2 * (2 - x3)))
   ```

   Treat the bits as independent. Then E[a] and E[a^2] are short
   polynomials in t0..t3:

   ```
   mid  = 4*(2 - t1) + t1*t2*(2 - t3)
   mean = t0 * mid
   var  = 8*((2 - t3)/2 - t2*(2 - t3)) - 51 + 16*mid - mean^2
   ```

   In hardware this is a few multipliers, the constants 2 and 51, and the
   shifts >>1, <<2, <<3 and <<4.

   The datapath this design follows prints a "+" in front of t2*(2 - t3) in
   the variance. With the labelling that its own mean branch implies, that
   sign gives wrong variances. Here it is a "-", which makes the variance
   exact for independent bits (see `tb_mv_pam_unit`, which compares against
   the exact expectation).

`mv_unit` streams one user per cycle through a real and an imaginary
`mv_pam_unit`. It has two pipeline stages. Per user it produces:

* s_hat;
* alpha = z - s_hat_old, using s_hat_old kept per problem;
* tau = var_re + var_im.

It also accumulates g^T tau for the SINR unit. In the first iteration z,
rho and s_hat_old are forced to zero. The MV output then depends on the
priors alone: with strong priors, the first s_hat is already the decoder's
guess.

## Interference cancellation on a rotating ring (ic_matvec, gram_row_mem)

The product G~ * s_hat has 32 x 32 complex terms, computed by 32 complex MAC
lanes in 32 cycles. Lane u owns row u. In a plain linear array, every s_hat
element would feed all 32 lanes in turn. That is a fan-out of 32, which sets
the critical path.

This design uses a simplified Cannon scheme instead:

* s_hat is loaded into a ring of 32 registers that rotates by one position
  per cycle.
* Each ring register drives exactly one MAC lane and one neighbouring
  register.
* At step c, lane u sees s_hat[(u + c) mod 32], so it must read
  G~[u][(u + c) mod 32].
* Each lane's row memory, `gram_row_mem` (32 words x 28 bits: 14-bit real
  and 14-bit imaginary parts), stores its row in that rotated order. All
  lanes therefore share one read address, c.
* The write port takes the natural (row, column) address and stores the
  entry at column - row.

Two more terms use the same lanes:

* y_MF preloads the accumulators at step 0;
* a 33rd step multiplies alpha_u by the real weight b.

One IC pass therefore takes 33 MAC cycles, plus a load and a hand-over
cycle, and fits in the 36-cycle slot.

## SINR update and reciprocal (sinr_unit, nr_recip)

`sinr_unit` keeps rho and tau_d for each of the two problems. When the MV
unit has finished g^T tau, the unit runs three cycles:

1. tau_hat = g^T tau >> log2(B);
2. tau_d, b and x = N0/B + tau_d;
3. rho = 1/x.

B must be a power of two, and theta is an 8-bit fraction (128 = 1.0).

`nr_recip` computes 1/x with one Newton-Raphson step:

1. shift x into [0.5, 1) with a leading-one detector;
2. take the first guess y0 from a 32-entry table, round(2^21 / (65 + 2i));
3. refine it once: y1 = y0 * (2 - x * y0);
4. shift back.

Its relative error is below 0.1 %. Results too large for rho's 24 bits
saturate; x = 0 also saturates.

## Output LLRs (llr_unit)

After the last IC pass, the LLR unit computes for each user

```
rho*g_u * ((z - a0_k)^2 - (z - a1_k)^2)
```

for all 8 bits. It gets no prior. The results are therefore *extrinsic*
LLRs, which is what an iterative receiver passes to the decoder. The unit
handles one user per cycle with a one-cycle latency, and emits one 8-LLR
word per user.

## Schedule (lama_ctrl)

Time is cut into slots of Ts = 36 cycles. For a pair started in slot 0:

| slot            | MV unit                  | IC unit                  | LLR unit  |
|-----------------|--------------------------|--------------------------|-----------|
| 0               | problem 0, iteration 1   | -                        | -         |
| 1               | problem 1, iteration 1   | problem 0, iteration 1   | -         |
| 2               | problem 0, iteration 2   | problem 1, iteration 1   | -         |
| ...             | ...                      | ...                      | -         |
| 2*tmax-1        | problem 1, iteration tmax| problem 0, iteration tmax| -         |
| 2*tmax (tail)   | (next pair)              | problem 1, iteration tmax| problem 0 |
| 2*tmax+1 (tail) | (next pair)              | (next pair)              | problem 1 |

Within a slot:

* the MV unit issues user c in cycle c, for c = 0..31;
* the IC unit loads its ring in cycle 0;
* the MAC steps run in cycles 1..33;
* z is handed to the MV unit at the end of cycle 35;
* the SINR update starts as soon as g^T tau is complete. Its b is ready
  before the IC unit's Onsager step.

The two tail slots of a pair do not need the MV unit, so the next pair can
start in them. `start` is accepted either when the detector is idle or in
the last cycle of slot 2*tmax-1 (the `accept` output shows when).

* A single pair takes (2*tmax + 2)*Ts cycles.
* Pairs started back to back finish every 2*tmax*Ts cycles: 576 cycles per
  2 x 256 bits at tmax = 8. That is 355.6 Mb/s at 400 MHz.

Back-to-back operation needs the next pair's inputs while the current pair
still runs. For this, y_MF and the priors are double-buffered:

* host writes always go to the bank that the running pair does not read;
* `start` swaps the banks;
* the closing IC slot of a pair still reads that pair's old bank.

The next pair's data may be written from the cycle after the current pair's
start was taken. G~ and g are single-buffered and shared by both problems
and by chained pairs, which assumes one channel, for example the OFDM
symbols of one coherence interval.

## Number formats (lama_pkg)

| quantity                     | bits | fractional bits |
|------------------------------|------|-----------------|
| z, s_hat, alpha, y_MF, mean  | 16   | 8               |
| G~ entries, b                | 14   | 12              |
| g_u                          | 16   | 12              |
| variance                     | 16   | 8               |
| tau (per user)               | 17   | 8               |
| N0, tau_hat, tau_d           | 32   | 16              |
| rho                          | 24   | 8               |
| LLRs (prior and output)      | 8    | 2               |
| soft bits t                  | 10   | 8               |
| theta                        | 8    | 7               |

Intermediate products are rounded to the format of their result. Results
that can overflow saturate: LLRs, z, b and rho.

## Top level and host interface (lama_top)

The host writes through simple write-enable ports:

* G~ (`gram_*`);
* g (`g_*`);
* y_MF of problems 0 and 1 (`y_*`);
* the prior LLRs (`pr_*`, 8 per user: bits 0..3 real, 4..7 imaginary).

It also sets `n0`, `log2b`, `theta` and `tmax`, and pulses `start`. For
each pair, 64 words come out on `llr_valid`: problem 0 users 0..31, then
problem 1. `done` marks the last cycle of a pair.

Setting prior LLRs to zero gives plain (soft-output) detection. Strong
priors steer the MV unit from the first iteration on.

This design has no QPSK mode. A QPSK system can be emulated by pinning three
of the four bits of each dimension with saturated priors, which leaves the
points +-9 per dimension. The top-level testbench runs a 32 x 32 case this
way.

## Where this design departs from, or adds to, the published architecture

* **Fixed-point formats.** All widths above are this design's own. Only the
  7-bit tanh table input, the 28-bit Gram words and Ts = 36 are fixed by the
  published design.
* **Variance sign.** The sign in the variance polynomial is changed, as
  explained above.
* **Memories and clocking.** Latch arrays with per-word clock gates become
  flip-flop arrays with write enables. The clock gates of the original are
  replaced by enables.
* **Schedule details.** The slot plan, the tail, the chaining of pairs and
  the input double-buffering are this design's.
  * The published throughput formula, U*Q / (tmax*Ts + T_LLR) * f_clk, gives
    354 Mb/s at 400 MHz and tmax = 8.
  * Chained pairs here give 355.6 Mb/s, because the LLR pass overlaps the
    next pair instead of adding a cycle.
  * A lone pair takes two extra slots.
* **LLR unit timing.** The published design counts T_LLR = 1 cycle for its
  LLR stage. Here the LLR unit handles one user per cycle, with a
  one-cycle latency, in slots of its own after the last IC pass. Back to
  back, these slots are hidden under the next pair.
* **Where y_MF and b*alpha enter.** Preloading y_MF into the accumulators
  and using a 33rd MAC step for b*alpha are this design's choices.
* **Normalisation of g.** The published algorithm uses g_u = G_uu/U together
  with tau_hat = g^T tau / B. The SINR estimate is then only self-consistent
  for B = U. For B = 256 it is overconfident by a factor of about B/U.
  g is an input here, so a host may supply G_uu/B instead. The testbenches
  use G_uu/32 as published, and the detector still decodes correctly at
  high SNR.
* **Host interface.** The I/O and the preprocessing (forming G, G~ and y_MF
  from H and y) are not part of the detector. The interface is this
  design's.

## How far it has been checked

Every module has a self-checking testbench in `tb/` that compares it with an
independent model (`tb/lama_ref_pkg.sv` holds the shared reference
functions):

* `tb_tanh_lut`: all 128 table inputs.
* `tb_llr_bit_unit`, `tb_mv_pam_unit`: random inputs against the exact
  max-log LLRs and the exact bit-domain moments.
* `tb_ic_matvec`: bit-exact product.
* `tb_nr_recip`: relative error across the input range.
* `tb_sinr_unit`: damped updates of two interleaved problems, plus latencies.
* `tb_lama_ctrl`: the slot plan cycle by cycle for several tmax, plus
  chaining.
* `tb_lama_top`: full size (32 users, 256-QAM, Ts = 36, no parameter
  overrides). It generates Rayleigh channels and runs the detector next to
  a floating-point LAMA model.
  * 256 x 32 at high SNR: no bit errors.
  * 256 x 32 with damping, and 32 x 32 with and without priors: hard
    decisions match the model exactly.
  * 256 x 32 with a 6 dB spread of per-user path loss, correlated
    antennas, tmax = 9 and damping: hard decisions match the model.
  * 32 x 32 QPSK emulation.
  * Three chained pairs: LLRs bit-identical to single runs, and finishing
    every 2*tmax*Ts cycles.

The clock frequency, area and power of the original have not been
reproduced. No timing closure or synthesis for a 28 nm library was done.
The WINNER II urban-micro channel used in the published error-rate curves
is not modelled by the testbenches. They use Rayleigh channels, with path
loss and antenna correlation added in one case.

## Simulating

All files are plain SystemVerilog. The package `rtl/lama_pkg.sv` (and, for
testbenches, `tb/lama_ref_pkg.sv`) must come first. For example, with
Verilator 5:

```
verilator --binary --timing -Wno-fatal -j 4 \
    rtl/lama_pkg.sv tb/lama_ref_pkg.sv -y rtl +libext+.sv \
    tb/tb_lama_top.sv --top-module tb_lama_top -Mdir obj_top
./obj_top/Vtb_lama_top
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. The
top-level test builds in under a minute and runs in seconds. To change the
number of users, override `NU` (and `NTS`, which must be at least NU + 3) on
`lama_top`; the package constants `U` and `TS` set the defaults.

## Files

| file | contents |
|------|----------|
| `rtl/lama_pkg.sv` | sizes, number formats, types, saturation helpers |
| `rtl/lama_top.sv` | top level: input buffers, units, wiring |
| `rtl/lama_ctrl.sv` | slot scheduler, chaining, bank control |
| `rtl/mv_unit.sv` | per-user MV pipeline, Onsager state, g^T tau |
| `rtl/mv_pam_unit.sv` | bit-domain mean and variance of one 16-PAM dimension |
| `rtl/pam_nearest.sv` | nearest PAM points per bit value |
| `rtl/llr_bit_unit.sv` | one max-log bit LLR |
| `rtl/tanh_lut.sv` | tanh(LLR/2) table |
| `rtl/ic_matvec.sv` | 32-lane MAC array with rotating ring |
| `rtl/gram_row_mem.sv` | one Gram row per lane |
| `rtl/sinr_unit.sv` | tau_hat, damping, b, rho |
| `rtl/nr_recip.sv` | Newton-Raphson reciprocal |
| `rtl/llr_unit.sv` | output LLRs, one user per cycle |
