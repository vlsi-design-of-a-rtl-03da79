# NOPE: a nonparametric iterative equalizer for massive MU-MIMO, in SystemVerilog

In the uplink of a massive multi-user MIMO system a base station with B
antennas receives y = Hx + n from U single-antenna users. It has to recover
the transmit vector x, and for soft-output detection it also needs a
signal-to-noise ratio per user. Linear MMSE equalization needs the noise
variance and the transmit power, and inverts a U x U matrix. Approximate
message passing (AMP) avoids the inversion, but its usual form needs the same
statistics and the constellation. The equalizer here needs neither. Each
iteration estimates the residual noise variance from ||r||^2. It estimates the
per-user signal power from the spread of the matched-filter output. It then
applies a per-user scalar shrinkage that approaches L-MMSE equalization. Only
matrix-vector products, norms and one reciprocal per user are needed. Nothing
is ever inverted.

The RTL implements the robust form of the algorithm for B = 64 and U = 16
(load factor beta = U/B = 1/4). Two problems run interleaved. The default
parameters are the published configuration.

## The iteration

H is first normalised column by column. d_u^2 = ||h_u||^2 and d_u^-2 are
computed outside this design and loaded with H. <.> is the mean over users.
Iteration t = 1 .. tmax, with x^0 = 0, r^0 = 0 and <alpha>^0 = 0, does:

    r   = y - H x + (beta/2) <alpha> r_prev           residual with Onsager term
    v_r = (beta/2) ||r||^2                              noise variance estimate
    z   = x + d^-2 o (H^H r)                            per-user matched filter output
    v_zRe = sum_u d_u^2 Re(z_u)^2 ,  v_zIm likewise     (divided by U)
    K   = 1 / (v_r <d^2>)
    alpha_Re,u = 1 - 1/(1 + K d_u^2 (v_zRe - v_r)),  alpha_Im,u likewise
    x_u = alpha_Re,u Re(z_u) + j alpha_Im,u Im(z_u)
    <alpha> = mean_u (alpha_Re,u + alpha_Im,u)
    rho_u   = (2B/beta) K <d^2> d_u^2                   post-equalization SNR

The outputs are z^tmax, which is the equalized vector, and rho^tmax.
Handling Re and Im separately lets one datapath serve BPSK and QAM: for BPSK
the imaginary signal power is zero, so alpha_Im goes to 0.

The shrinkage 1 - 1/(1+w) is used instead of the form 1/(1 + 1/w). For w >= 0
it lies in [0,1). One Newton-Raphson step from a table seed is then accurate
enough. A negative w means the estimated signal power is below zero. It is
clamped to 0, so alpha = 0 and the estimate for that user is zero.

## Architecture

    y, H, d^-2 ──► MVU ──[z, ||r||^2]──► EU ──► rho
                    ▲                    │
                    └────[x, <alpha>]────┘        z leaves the MVU

| unit | module | work per phase |
|---|---|---|
| matrix-vector unit | `mvu` (4 x `mvu_block`) | r, ‖r‖², z |
| estimation unit | `eu` (`norm_z`, `mean_var_est`) | v_z, K, alpha, x, <alpha>, rho |
| controller | `nope_ctrl` | phase timing, slot interleaving, iteration count |
| top | `nope_top` | the above plus the two pipeline registers |

Arithmetic helpers: `cmac` is a complex MAC. `wsq_mac` computes weighted
squares. `norm_r` is the ‖r‖² slice of one MVU block. `recip_nr` is the
reciprocal.

### Cannon-style matrix-vector blocks

The 64 x 16 matrix H is cut into four 16 x 16 row blocks A_m. Each block
(`mvu_block`) has 16 lanes, one per row. Each lane has its own memory, a
complex MAC and one stage of a circular shift register. Row i is stored
rotated by i: word k of lane i holds A[i][(i+k) mod 16]. Loading column c
therefore writes lane i at word (c - i) mod 16. Every lane memory is written
once per column, so column-wise loading never has two writes to one memory.

- **H x (pre-shift).** x is loaded into the shift register, with lane i
  holding x[i]. In step k, lane i multiplies its word k by the register entry
  x[(i+k) mod 16] and adds the product to its own accumulator. After the step
  the register rotates by one. After 16 steps lane i holds (A x)_i.
- **A^H r (post-shift).** r stays in the register, with lane i holding r_i. In
  step k, lane i multiplies conj(word k) by r_i. It adds the product to the
  accumulator of lane i+1, not its own: the accumulators rotate and the
  operand does not. Column j's partial sum visits every lane once and collects
  conj(A[i][j]) r_i. After 16 steps the sum for column j sits in lane j-1, and
  the output re-indexes it.

Both products use the same stored matrix, the same multipliers and no
transposition. In the H^H r pass, `norm_r` also sums |r_i|^2 from the
register, one entry per cycle.

The residual update is one extra cycle inside each block:
r_new = y - (A x) + ((beta/2)<alpha>) r_old. beta/2 = 1/8 is a shift. r_new
goes into the block's r memory and into the shift register for H^H r.

### Combining the four blocks

H^H r = sum_m A_m^H r_m. The four 16-entry partial results are added over
two cycles: blocks 1+2 and 3+4, then the two sums. The four ‖r_m‖² are added
the same way. The second cycle also computes
z = sat(x + d^-2 o H^H r) with 16 real-by-complex multipliers.

One MVU phase:

| cycle | action |
|---|---|
| 0 | load x (or 0 in the first iteration) into the shift registers |
| 1 .. 16 | H x, one column step per cycle |
| 17 | residual update |
| 18 .. 33 | H^H r and ‖r‖² |
| 34 | first accumulation cycle |
| 35 | second accumulation cycle, z and ‖r‖² valid |

PHASE = 2U + 4 = 36 cycles.

### Estimation unit

`norm_z` computes v_zRe and v_zIm with two MACs, one user per cycle, weighting
each square by d_u^2. It also sums d_u^2 for <d^2>. This takes cycles
0 .. 15 of the EU phase. `mean_var_est` then works as follows:

- **cycle 16:** v_r = ||r||^2/8. It forms K = 1/(v_r <d^2>) with `recip_nr`,
  and the clamped differences v_zRe - v_r and v_zIm - v_r.
- **cycle 17:** q = K (v_z - v_r) for Re and Im, and K <d^2>.
- **cycles 18 .. 33:** one user per cycle. It computes w = q d_u^2 and
  alpha = 1 - 1/(1+w), using two more `recip_nr` instances. It also computes
  x_u = alpha o z_u, rho_u = 512 K <d^2> d_u^2, and the running alpha sum.
- **cycles 34 .. 35:** it writes the last user, then outputs
  <alpha> = sum/16 and raises done.

The EU phase therefore has the same 36 cycles as the MVU phase.

`recip_nr` finds the leading one of its operand and normalises it to a
mantissa m in [1,2). It reads a seed g0 = 1/m_mid from a 64-entry table, where
m_mid is the midpoint of the table interval. The table is computed in
SystemVerilog. It then applies one Newton step, g1 = g0 (2 - m g0), and shifts
the result back. Its testbench requires a relative error below 2^-13 (about 1.2e-4). The result
approaches 1/m from below. The output saturates at all ones for a = 0 or on
overflow.

### Interleaving two problems

The MVU and EU phases are equally long. So, while the MVU works on problem A,
the EU can work on problem B, and at the end of every phase they swap.
`nope_ctrl` keeps a free-running phase counter whose parity says which slot the
MVU serves: the MVU serves slot `par` and the EU serves slot `~par`. Each slot
steps through these states:

| state | meaning |
|---|---|
| idle | ready: may be loaded and started |
| pending | started; waits for the phase whose parity gives it the MVU |
| MVU | the MVU works on it this phase |
| EU | the EU works on it this phase |

A slot alternates MVU and EU phases tmax times. Its z appears at the end of
its last MVU phase. Its rho appears at the end of the following EU phase, when
the slot becomes idle again.

The two registers between the units are captured in the last cycle of a
phase:

- MVU → EU carries z and ‖r‖².
- EU → MVU carries x and <alpha>.

A single register pair suffices, because the unit that reads it in the next
phase serves the same slot.

Latency and throughput:

- **Latency from start:** up to one phase of waiting for the right parity,
  then (2 tmax - 1) phases to z and one more phase to rho.
- **Throughput:** with both slots busy, one result every tmax phases.
- **256-QAM (tmax = 7):** one 64 x 16 problem per 252 cycles, which is 0.41
  Gb/s at 800 MHz.

### Loading and interface

A slot can be loaded only while it is ready:

- `ld_h_en` writes one column of H (all 64 rows) together with that user's
  d_u^2 and d_u^-2.
- `ld_y_en` writes all of y.
- `start` with `start_slot` and `tmax` (1..15) starts a loaded slot.

Loading while a slot is busy is an assertion error. `nope_top` has these
outputs:

| signal | meaning |
|---|---|
| `ready[1:0]` | which slots are idle |
| `z_valid`, `z_slot`, `z` | equalized output, one-cycle valid pulse; the value is held |
| `rho_valid`, `rho_slot`, `rho` | post-equalization SNRs, one-cycle valid pulse; the value is held |

Reset (`rst_n`, asynchronous, active low) clears control state only. Datapath
registers are always written before they are read.

## Number formats

All formats are in `nope_pkg`. Only the formats of H and y come from the
published design. The other widths were chosen to give a 64 x 16 system
headroom without overflow for scaled constellations up to 256-QAM.

| quantity | bits | fraction bits | notes |
|---|---|---|---|
| H | 11 | 10 | signed, entries scaled below 1 |
| y | 10 | 4 | signed |
| x, r, z | 16 | 8 | signed, saturating |
| d^2, d^-2 | 16 | 8 | unsigned |
| MAC accumulators | 36 | 18 | |
| ‖r‖² | 40 | 16 | |
| EU scalars (v_r, v_z, K, rho) | 56 | 24 | unsigned |
| alpha, <alpha> | 18 | 16 | |

Narrowing truncates by an arithmetic right shift and then saturates. Nothing
rounds.

## Departures from the published design

- **Throughput.** The published implementation reports 0.92 Gb/s at 800 MHz
  for 256-QAM with 7 iterations. That is about 111 cycles per problem, or
  roughly 16 cycles per phase with two problems in flight. This RTL needs 36
  cycles per phase: 16 for H x, 16 for H^H r, 2 for accumulation, plus one
  cycle each for loading x and for the residual update. So it reaches about
  0.41 Gb/s at the same clock. The H x and H^H r work described for the
  matrix unit cannot fit into 16 cycles per phase.
- **Inputs d^2 and d^-2.** The block diagram labels the inputs as d and d^-1,
  but the algorithm uses d^2 and d^-2. This design follows the algorithm.
  Preprocessing is not part of the design.
- **<d^2>** is recomputed every EU phase from the stored d_u^2 rather than
  loaded.
- **K (v_z - v_r)** is formed once per iteration and multiplied by d_u^2 for
  each user. This is an algebraically equal reordering.
- **Clamping.** A negative v_z - v_r is clamped to 0. The published
  description does not say how this case is handled.
- **Own choices** include:
  - all widths except those of H and y;
  - the direction of the post-shift;
  - the register-array memories;
  - the load/start interface, the slot state machine and the reset.
- **Not included:** LLR computation (the consumer of z and rho).

## Verification

Each module has a self-checking testbench in `tb/`, named `<module>_tb`. Each
one prints `TB_RESULT checks=N failures=M` and has a watchdog.

`nope_top_tb` runs the top at its default size against a floating-point model
of the iteration. In each problem:

- H is Rayleigh-faded with large-scale gains.
- The symbols are BPSK, 16-QAM or 256-QAM.
- The noise has a chosen SNR.

The testbench checks the following:

- z is within 0.06 + 3 % of the model.
- rho is within 5 % of the model.
- Slicing z gives no symbol errors.
- z and rho appear exactly when the schedule above says.

The testbench runs three rounds:

1. 16-QAM (tmax 5) together with BPSK (tmax 5).
2. 256-QAM (tmax 7) together with 16-QAM (tmax 7).
3. A 16-QAM problem, with a BPSK problem loaded and started into the other
   slot while the first is still running.

The testbench counts each mechanism and fails if one never occurs:

- phases in which both units are busy (interleaving);
- first-iteration phases;
- clamped signal-power estimates;
- reloads of a slot;
- results.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing -Wno-fatal --top-module nope_top_tb \
        rtl/nope_pkg.sv $(ls rtl/*.sv | grep -v nope_pkg) tb/nope_top_tb.sv
    ./obj_dir/Vnope_top_tb

Swap the top module and the testbench file to run another testbench. Building
the full top takes about a minute. The simulation itself takes seconds. The
sizes are parameters: `U` (B is 4U) and `TW`, the width of tmax. Change the
number formats in `nope_pkg`.
