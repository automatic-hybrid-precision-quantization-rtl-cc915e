# HF-AMP: a hybrid-precision, fully pipelined AMP detector for 8 x 128 16-QAM MIMO

A massive-MIMO uplink receiver must recover the symbols sent by N_t users from
N_r antenna signals. Approximate message passing (AMP) does this by iterating
two steps:

1. For each symbol it forms a noisy observation z and computes the posterior
   probabilities of the constellation points.
2. It cancels the interference of the other symbols through the Gram matrix G.

This RTL implements a hardware-friendly version of the nearest-neighbour variant
of AMP. Three ideas make it cheap enough to unroll completely:

* **Per-variable bitwidths.** Each variable of the algorithm has its own
  fixed-point format, written 1-p-q: a sign bit, p integer bits and q fraction
  bits. Most are 5 to 10 bits wide, not a single wide format for everything.
  Every product and sum is requantized to its variable's format by rounding and
  saturating.
* **Nearest-neighbour probabilities with no exponentials or divisions.** Only the
  two constellation points nearest to z get a probability. With the integer
  constellation {-3,-1,+1,+3}, the interval z lies in picks both points, the
  sign of the mean and the correction term. The posterior mean then needs only
  shifts, one adder and multiplexers. The remaining nonlinear functions
  (1/(1+e^x) and 1/tau) are single straight-line segments.
* **Node compression.** The AMP variance tau is replaced by the noise variance
  sigma_n^2. The residual d = b - G xhat is kept instead of the full
  matched-filter update.

One frame is the 2 N_t = 16 real values of one received vector. The detector
takes one frame per clock and returns its estimate 25 clocks later, after
four unrolled iterations.

## Real-valued model and what enters the chip

The complex system y = Hx + n (H is 128 x 8) is rewritten as a real system with
16 unknowns per frame. Each unknown is one of {-3,-1,1,3}: the real or imaginary
part of a 16-QAM symbol on an integer grid. The detector does not see y or H.
It works on:

| input | meaning | format |
|---|---|---|
| `in_b[16]` | matched-filter output b = H^T y, one vector per frame | 1-3-6 |
| `cfg_g_row[16]` | one row of the Gram matrix G = H^T H, written row by row | 1-2-7 |
| `cfg_sigma2` | noise variance per real dimension, tau = sigma_n^2 | 1-1-3 |

Forming b and G from y and H (the matched filter) is not part of the design. The
top module takes b and G on ports. G and sigma_n^2 stay fixed over a block of
frames, such as one coherence interval.

## The iteration

Starting from xhat^(0) = 0 and d^(0) = b, each iteration l = 1..4 computes, for
every lane i:

```
z_i     = xhat_i + d_i                              observation
chi_i   = z_i * (1/tau)                             scaled observation
(m1,m2) = nearest, second-nearest symbol of z_i     from the interval of z_i
Dtmp_i  = chi_i - (2/tau) * sign(a_w)                a_w = m1 + m2 in {-4,0,+4}
rho(m1) = f1(-2|Dtmp_i|),  rho(m2) = 1 - rho(m1)    neighbour probabilities
xhat_i  = m1 rho(m1) + m2 rho(m2)                   posterior mean
d_i     = b_i - sum_j g_ij xhat_j                   new residual
```

The design returns xhat^(4) and d^(4). The sign of xhat^(4) and its distance
to the constellation points give the hard decision. That slicing is left to
the user.

### Interval flags (NNA-CASE)

The integer part z[8:4] of z (format 1-4-4) decides everything that depends on
the two nearest points. It is encoded in five flags:

| z interval | (m1, m2) | F1 F2 F3 | F4 F5 | a_w | xhat |
|---|---|---|---|---|---|
| z < -2 | (-3, -1) | 1 1 1 | 0 1 | -4 | -(rho1 + rho2 + 2 rho1) |
| -2 <= z < -1 | (-1, -3) | 1 1 0 | 0 1 | -4 | -(rho1 + rho2 + 2 rho2) |
| -1 <= z < 0 | (-1, +1) | 0 1 0 | 1 1 | 0 | -(rho1 - rho2) |
| 0 <= z < 1 | (+1, -1) | 0 0 0 | 1 1 | 0 | +(rho1 - rho2) |
| 1 <= z < 2 | (+1, +3) | 1 0 0 | 1 0 | +4 | +(rho1 + rho2 + 2 rho2) |
| z >= 2 | (+3, +1) | 1 0 1 | 1 0 | +4 | +(rho1 + rho2 + 2 rho1) |

* F1 marks an outer symbol in the pair.
* F2 is the sign of the mean.
* F3 says which probability belongs to the outer symbol.
* F4F5 select the term added to chi: +2/tau, -2/tau or 0 (multiplexer MUX-rho).

The last column is what Mean-Sel computes, using a shift-by-one, one adder and
two multiplexers.

### Neighbour probability (PE 4)

Delta~ = -2|Dtmp| is the log-ratio of the two neighbour probabilities, clipped
to [-4, 0]. On that interval, 1/(1+e^x) is replaced by its chord
1/2 - x/8. So:

```
rho(m1) = 1/2 + min(|Dtmp|, 2)/4       in [1/2, 1]
rho(m2) = 1 - rho(m1)
```

In the 1-1-3 format this is a shift and a subtraction from 8. The result is
exact, so no rounding is needed.

### 1/tau

tau = sigma_n^2 is clipped to [1/8, 15/8]. Its reciprocal is taken from the
line 1/tau ~ 8.5 - 4.25 tau, rounded to 1-4-1. The line nearly meets 1/tau at
both ends of the interval. In between it lies well above 1/tau: at tau = 1 it gives
4.25, where the true value is 1. The detector uses the line, not the true
reciprocal. The reference model in `tb/` uses the same line.

## Formats

Every narrowing uses the requantizer `rnd_sat` in `rtl/hfamp_pkg.sv`. It rounds
to the target LSB, with ties going up (toward +infinity), then clips to the
target range.

| variable | format 1-p-q | width / frac | where produced |
|---|---|---|---|
| b | 1-3-6 | 10 / 6 | input |
| g_ij | 1-2-7 | 10 / 7 | input (GM-Mem) |
| sigma_n^2 = tau | 1-1-3 | 5 / 3 | input (AP-Mem) |
| rho | 1-1-3 | 5 / 3 | PE 4 |
| omega*rho (Mean-Sel intermediate) | 1-2-3 | 6 / 3 | Mean-Sel |
| xhat | 1-2-2 | 5 / 2 | Mean-Sel output |
| 1/tau | 1-4-1 | 6 / 1 | PLA in AP-Mem |
| d | 1-3-4 | 8 / 4 | MV-Mul output, MFO-Mem (d^(0)) |
| z | 1-4-4 | 9 / 4 | PE 1 |
| g_ij * xhat_j | 1-3-6 | 10 / 6 | MV-Mul multipliers |
| sum_j g_ij xhat_j | 1-3-4 | 8 / 4 | MV-Mul adder tree |
| chi | 1-6-1 | 8 / 1 | PE 2 |
| Delta~ | 1-3-1 | 5 / 1 | PE 4 |

Because z = xhat + d is added in the d format, the adder in PE 1 is only 7 bits
wide:

* The low two fraction bits of z are the low bits of d.
* The upper seven bits are xhat plus the upper part of d.

## Pipeline and timing

Each iteration is a CPE (constellation processing element) followed by a PIC
(parallel interference cancellation). Both are 16 lanes wide:

| stage | register group | contents |
|---|---|---|
| CPE R-1 | after PE 1-3 | flags F1..F5, chi |
| CPE R-2 | after PE 4 | rho(m1), rho(m2), F1 F2 F3 |
| PIC R-1 | after Mean-Sel | new xhat (16 lanes) |
| PIC R-2 | after the 256 multipliers | g_ij * xhat_j |
| PIC R-3 | after the 16-input adder trees | sum_j g_ij xhat_j |
| PIC R-4 | after b - sum | new d |

There are 4 x (2 + 4) = 24 register stages. The output bank (DO-Mem) adds one
more, so a frame accepted at clock edge t comes out at edge t + 25. A new frame
can enter every clock. At 560 MHz that is 4 bits x 8 users x 560 M frames/s =
17.92 Gb/s.

Two sets of registers only carry data alongside the main path:

* The PIC delays xhat through R-2..R-4. The next CPE needs xhat and d of the same
  frame.
* MFO-Mem is a 23-deep shift register of b. Each PIC subtracts the b of its own
  frame, read from taps at delays 5, 11, 17 and 23.

## Control and configuration

The datapath registers have no enable and no reset: they shift every clock. The
control unit (CU) keeps one valid bit per stage, numbers the frames, and pulses
`out_valid` with `out_frame` when a frame comes out.

G and sigma_n^2 are shared by all frames in the pipeline, so a change must not
reach frames already in flight. A configuration write goes like this:

1. The master raises `cfg_valid`.
2. The CU drops `in_ready` at once and waits for the pipeline to empty.
3. The CU then raises `cfg_ready`, and the write happens on that edge.
   * `cfg_sel = 0` writes row `cfg_row` of G.
   * `cfg_sel = 1` writes sigma_n^2. 1/tau follows combinationally.

Two assertions in `control_unit` check the rules:

* A frame and a configuration write never happen in the same cycle.
* A write happens only when the pipeline is empty.

`rst_n` is active low and asynchronous. It clears the valid bits, sets
sigma_n^2 to 1.0 and clears the frame counter. G is not reset, so load it
before the first frame.

## Top-level ports (`hf_amp_top`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock, async active-low reset |
| in_valid / in_ready | in / out | 1 | frame handshake; transfer when both are high |
| in_b | in | 16 x 10 | b of the frame |
| cfg_valid / cfg_ready | in / out | 1 | configuration handshake |
| cfg_sel | in | 1 | 0: G row, 1: sigma_n^2 |
| cfg_row | in | 4 | row of G |
| cfg_g_row | in | 16 x 10 | row data |
| cfg_sigma2 | in | 5 | noise variance |
| out_valid | out | 1 | one-cycle pulse per detected frame |
| out_xhat | out | 16 x 5 | xhat^(4) |
| out_d | out | 16 x 8 | d^(4) |
| out_frame | out | 16 | frame number, counted from 0 after reset |

The parameters `N` (lanes, default 16) and `NIT` (iterations, default 4) scale
the structure. The formats were chosen for 16 lanes and 4 iterations only.

## Module map

| module | role |
|---|---|
| `hfamp_pkg` | sizes, formats, flag types, `rnd_sat` |
| `hpa_7b` | PE 1: z = xhat + d (7-bit adder) |
| `hpm_s8` | PE 2: chi = z * 1/tau |
| `nna_case` | PE 3: flags from the interval of z |
| `hpa_abs` | PE 4: MUX-rho, Dtmp, clip, rho(m1), rho(m2) |
| `cpe` | 16 lanes of PE 1-4 with R-1, R-2 |
| `mean_sel` | shift-and-add posterior mean, R-1 |
| `mv_mul` | one row of b - G xhat: multipliers, tree, subtract, R-2..R-4 |
| `pic` | 16 Mean-Sel + 16 MV-Mul, xhat delay |
| `recip_pla` | 1/tau line |
| `gm_mem` | G register bank (16 x 16 x 10 bits) |
| `ap_mem` | sigma_n^2 register, 1/tau |
| `mfo_mem` | d^(0) = b, delay line of b |
| `do_mem` | output register bank |
| `control_unit` | valid tracking, frame numbers, configuration drain |
| `hf_amp_top` | the detector |

## Where this RTL departs from, or adds to, the published description

* **The rho approximation.** The published slope and intercept (0.5 and -0.125)
  give negative probabilities on [-4, 0]. The RTL uses the chord of 1/(1+e^x) on
  that interval (slope -1/8, intercept 1/2), with the same interval and clip.
  The line lives in `hpa_abs`. `ETA_A1` sets the clip.
* **F4F5 codes.** The written rule (01: add 2/tau, 11: nothing, 10: subtract)
  and the interval drawing do not agree. The RTL follows the written rule.
* **xhat^(0) = 0.** The published initial value is the symbol energy, which the
  1-2-2 format of xhat cannot represent. Zero is the usual AMP start.
* **Extra cycles.** The CPE R-2 registers also carry F1 F2 F3, which Mean-Sel
  needs. xhat is delayed inside the PIC. A final output register (DO-Mem) makes
  the latency 25 cycles rather than the 24 pipeline stages.
* **Rounding.** Ties round up. Sums inside the MV-Mul adder tree keep full
  precision and are rounded once, to 1-3-4. The formats themselves are the
  published ones.
* **Configuration.** The published design names a control unit for clock and
  I/O control but gives no protocol. The drain-before-write handshake is this
  design's own. So is the register-bank (rather than SRAM) form of G.
* **Not built:**
  * the matched-filter preprocessing that forms b and G;
  * the clock-gating side of the control unit;
  * the automatic bitwidth search that produced the formats (an offline
    algorithm);
  * everything physical (65 nm implementation, 560 MHz timing, area and power).

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=<n> failures=<n>`, stops itself with a watchdog, and compares
against independently computed values. For the datapath blocks, those values
come from `tb/hfamp_ref_pkg.sv`. That file is a behavioural model of the whole detector in `real` arithmetic, with explicit
rounding to each format.

`tb_hf_amp_top` runs the detector at its default size:

* It draws a random 8 x 128 channel and 600 random frames under two channel and
  noise settings.
* The second configuration is requested while frames are still in flight.
* Every output must match the reference bit for bit, arrive 25 cycles after its
  input, in order, with the right frame number.
* Each interval case, each F4F5 code, the clip of Delta~, input bubbles and a
  configuration drain must occur at least once.

In the last run, hard decisions on xhat^(4) gave 782 symbol errors out of 9600.
Slicing b directly gave 1534.

`tb_hf_amp_nt_sweep` builds the detector for 16 and 32 users on the same 128
antennas (`N` = 32 and 64 lanes). The formats stay those chosen for 8 users.
It runs 150 frames through each size and checks them in the same way:

* bit-exact against the reference model;
* 25-cycle latency;
* one frame per clock.

In one run at sigma_n^2 = 0.25:

* the 16-user detector made 303 symbol errors out of 4800, against 1012 for
  direct slicing;
* the 32-user detector made 1912 out of 9600, against 2972.

The error rate grows with the load, as expected. The 64-lane build takes several
minutes to compile.

How far to trust this RTL:

* The bit-level behaviour is checked against a model written from the same
  reading of the algorithm. Where that reading departs from the published
  description (listed above), model and RTL depart together.
* Error-rate curves of the published detector have not been reproduced.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/hfamp_pkg.sv tb/hfamp_ref_pkg.sv tb/tb_hf_amp_top.sv \
    --top-module tb_hf_amp_top -o sim
./obj_dir/sim
```

`-y rtl` lets Verilator find each module in the file of the same name. The two
packages are listed first so that they are compiled before their users.
Verilator prints width warnings for the testbenches' conversions to `real`;
they are harmless.

For a block test, replace `tb_hf_amp_top` with that block's testbench, for
example `tb_mv_mul`. The full-size end-to-end test compiles in under a minute
and runs in seconds.

Where to change things:

* Formats are in `hfamp_pkg`. Changing one means checking the fixed shifts in
  the modules that use it: `hpa_7b`, `hpm_s8`, `mv_mul`, `mean_sel`.
* The PLA constants are parameters of `recip_pla` and `hpa_abs`.
