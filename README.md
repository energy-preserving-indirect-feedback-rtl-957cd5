# Optimal energy beamformer driven by indirect feedback

A multi-antenna wireless power transmitter delivers the most energy when its
beamforming vector points along the channel, w = h/||h||. In this setting the
transmitter cannot measure h, and the battery-less device it powers never
reports it. The device runs harvest-then-transmit: it charges a
super-capacitor until it has enough energy for one short information packet,
then sends that packet. The transmitter overhears these packets, so it can
measure how long the device took to recharge while a given vector w was on
air. That time is a known, monotone function of the received power, so it
can be inverted to give the one number the transmitter ever learns about a
vector:

    tau(w) = |h^H w|.

This RTL implements the digital core, the *optimal energy beamformer* (OEB).
From such magnitude-only measurements it finds w_opt = e^{j c} h/||h||, using
3N-2 probing slots for N antennas. It follows the architecture of the
publication "Energy-preserving Indirect-feedback for Wireless Power
Transfer". The defaults are the published configuration: N = 5 antennas,
80-bit (5 × 16-bit) vectors, 8-bit tau values and a 16-bit datapath.

## How phase is recovered from magnitudes

A magnitude says nothing about phase, so the OEB measures magnitudes of
chosen combinations and solves for the phase.

**Basis slots (N slots).** The transmitter sends the N columns of a
unitary matrix Q one at a time. It stores tau_i = |zeta_i|, where
zeta_i = Q(:,i)^H h is the channel's i-th coordinate in that basis. The
optimum is w_opt ∝ sum_i zeta_i Q(:,i), so only the *relative* phases of the
zeta_i are still unknown.

**Relative-angle loop (N-1 passes, two slots each).** Start with
w = Q(:,1) and alpha_1 = tau_1. In each pass, take the next column
q = Q(:,i+1), whose magnitude is alpha_2 = tau_{i+1}. The unit-norm
combinations

    w(theta) = (alpha_1 w + e^{j theta} alpha_2 q) / sqrt(mu),   mu = alpha_1^2 + alpha_2^2

give

    |h^H w(theta)|^2 = kappa_1 + 2 kappa_2 (gamma_R cos theta - gamma_I sin theta)

with kappa_1 = (alpha_1^4 + alpha_2^4)/mu and kappa_2 = alpha_1 alpha_2/mu.
Here gamma = gamma_R + j gamma_I is the unknown unit phasor between the two
coordinates. Two trial vectors, at theta = pi/4 (w1) and theta = 7pi/4 (w2),
give two measured values tt1 and tt2. These are two linear equations, whose
solution is

    gamma_R = (tt1^2 + tt2^2 - 2 kappa_1) / (2 sqrt2 kappa_2)
    gamma_I = (tt2^2 - tt1^2)           / (2 sqrt2 kappa_2).

The stationary points of the expression are theta_1 = atan2(-gamma_I, gamma_R)
and theta_2 = theta_1 ± pi. The one where

    v = gamma_R cos theta - gamma_I sin theta

is positive is the maximum. The maximising w(theta) becomes the new w. Its
magnitude, sqrt(kappa_1 + 2 kappa_2 v), becomes the new alpha_1, so the
next pass needs no extra measurement. After N-1 passes w holds all N
coordinates with their correct relative phases. The common phase is that of
zeta_1, which is why Q(:,1)^H w_opt comes out real and positive.

Q is circulant, so only its first row is stored (a, b, c, d, e for N = 5).
Column j is that row rotated. In 0-based indices, Q(r, j) = row[(j - r) mod N],
so Q(:,1) = [a e d c b]^T, Q(:,2) = [b a e d c]^T, and so on.

## Architecture

```
                 +-------------+  q_col, tau  +------------------------------+
  q_row -------->|  Block-1    |------------->|  Block-2 (with Block-2a)     |---> w12 (on air)
  tau_i -------->|  RB-1, RB-2 |              |  mu, kappa, w1/w2, gamma,    |---> w_opt
                 |  MUX1, W    |---> w        |  angle CORDIC, sin/cos       |
                 |  DeMUX1,RB-3|   (on air)   |  CORDIC, MUX9/MUX10          |<--- tau_tilde
                 +-------------+              +------------------------------+
                        ^                      |  w_optf1     ^  w_optf2
                        |                      |  dot_fb      |  dot_prod
                        |                      +--> REG x2 ---+  (load: ld_fb)
                        |   selm1..8, seld1..4, load enables
                 +------+------------------------------------------+
  start, ack_sig |                 controller                      |---> w_req, w12_req, done
        -------->+-------------------------------------------------+
```

| module | role |
|---|---|
| `oeb_pkg` | number formats, constants and saturating fixed-point helpers (multiply, divide, square root, format conversions) |
| `oeb_block1` | RB-1 stores the first row of Q. The rotations form the N columns, which RB-2 stores. MUX-1 and the W register put one column on air. DeMUX1 writes each measured tau_i into RB-3 |
| `oeb_block2` | Block-2a forms mu, kappa_1, kappa_2 and w1/w2 (MUX2–MUX6). DeMUX2 stores tt1 and tt2. The gamma unit and two's-complement units feed the pair to the time-shared angle CORDIC (MUX7/DeMUX3). The time-shared sin/cos CORDIC follows (MUX8/DeMUX4). The sign of v_1 drives MUX10 (new vector) and MUX9 (new magnitude) |
| `oeb_cordic_atan` | vectoring CORDIC giving the four-quadrant angle atan2(y, x) |
| `oeb_cordic_sincos` | rotation CORDIC giving cos and sin over [-pi, pi] |
| `oeb_controller` | FSM that drives every select and load enable and waits for `ack_sig` in each probing slot |
| `oeb_top` | connects the blocks above and holds the two feedback registers (new w_opt and its magnitude) that close the loop |

### Number formats (`oeb_pkg`)

| type | bits | meaning |
|---|---|---|
| `cplx_t` | 16 = 8 + 8 | one complex element, `{re, im}`, each signed Q1.7 (code/128). Five of them make an 80-bit vector |
| `tau_t` | 8 | unsigned U0.8 magnitude (code/256). The algorithm does not depend on the scale of tau |
| `fx_t` | 16 | internal real scalar, signed, 12 fraction bits, range [-8, 8) |

All arithmetic saturates. Division by zero saturates with the sign of the
numerator. Vectors return to `cplx_t` by rounding to nearest.

### Handshake and timing

- `start` samples `q_row`.
- For each basis column, `w_req` is high while `w` is on air. The feedback
  unit answers with a one-cycle `ack_sig` and the measurement on `tau_i`.
- In a trial slot, `w12_req` and `w12` take the place of `w_req` and `w`,
  and the measurement comes on `tau_tilde`.
- An assertion requires that `ack_sig` comes only while a request is open.
- If every acknowledgement arrives in the first cycle of its request, `done`
  rises 1 + 2N + 7(N-1) + 1 clock edges after the edge that samples `start`:
  40 for N = 5. Each cycle an acknowledgement waits adds one cycle.
- `w_opt` is valid while `done` is high.
- Reset is synchronous and active low, and clears every register.

Dividers, square roots and both CORDICs are combinational; the 12 CORDIC
iterations are unrolled. Each CORDIC result therefore takes one cycle, but
the critical path is long. The published implementation reports 44 MHz on
an FPGA and 120 MHz in 90 nm CMOS. This RTL has not been timed, and meeting
such clocks would need pipeline registers in the divide/sqrt/CORDIC paths,
with the controller waiting correspondingly longer.

## Where this RTL departs from the published description

The published material is not fully self-consistent. Where it conflicts
with itself, this RTL follows the mathematics:

1. **Sign of gamma_I.** The algorithm listing computes gamma_I from
   tt1^2 - tt2^2. Solving the two linear equations gives tt2^2 - tt1^2, and
   only that sign makes theta_1 the *maximiser*. The listing's sign
   conjugates the recovered phasor gamma, so each pass combines the two
   coordinates with the wrong relative phase (the Block-2 testbench fails
   with it).
2. **Normalisation of the new w_opt.** The listing and the Block-2 diagram
   store alpha_1 w + e^{j theta} alpha_2 q without dividing by sqrt(mu). The
   analysis evaluates the unit-norm w(theta), and the next pass assumes a unit
   vector. The RTL divides by sqrt(mu).
3. **Magnitude fed back.** The diagram shows kappa_2 halved and no square
   root before MUX9. The RTL uses the listing's sqrt(kappa_1 + 2 kappa_2 v).
4. **Angle computation.** The diagram divides numerator by denominator
   before the angle CORDIC. A quotient cannot tell theta_1 from theta_2,
   which differ by exactly pi. The CORDIC here takes the (x, y) pair and
   returns a four-quadrant angle. A side effect is that theta_1 is always the
   maximiser, so MUX10/MUX9 always choose theta_1 (except when gamma = 0).
   The selection logic is kept as described and reported on `pick_theta2`.
5. **Signals the description does not name.** These are `start`, `done`,
   `w_req`, `w12_req` and the load enables (`ld_rb1`, `ld_rb2`, `ld_w`,
   `ld_rb3`, `ld_tt`, `ld_th`, `ld_ej`, `ld_fb`). The controller's state
   sequence is also this design's own. Only the select names and the
   `Ack_Sig` handshake are given. The published controller is larger
   (43 flip-flops); this FSM is smaller.
6. **Number formats.** The 8 + 8 split of the 16-bit element, the Q1.7, U0.8
   and 12-fraction-bit scalings, and the CORDIC iteration count are choices.
   The published figures give only the widths.

### Not implemented

- The unit that times the recharge interval and maps it to tau through the
  inverse of the harvester's charging law. It depends on the harvester's
  circuit values, and the published architecture excludes it as well. Its
  outputs, `ack_sig`, `tau_i` and `tau_tilde`, are ports of `oeb_top`.
- The per-slot time-limit extension of the algorithm. No hardware is
  described for it, and it needs the same charging law.
- The RF chain (signal generator, beamforming multipliers, amplifiers,
  antennas, energy detector) and the energy-harvesting device itself.

## Accuracy

Across random Rician channels (K = 2, K = 10 and pure line of sight) and
random circulant unitary bases, w_opt reaches a cosine similarity with h of
0.995–0.9999. This holds at N = 5 and N = 10, with a norm within a few
percent of 1. The limiting factor is the 8-bit Q1.7 vector element. In
ill-conditioned passes (one coordinate much smaller than the other), the
fixed-point kappa/gamma arithmetic moves individual elements by up to about
0.05 from a floating-point model. The overall direction is not measurably
affected.

## Testbenches

Each testbench is self-checking, has a watchdog and prints
`TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_oeb_cordic_atan` | angle against `$atan2` over all quadrants and radii down to 0.05 |
| `tb_oeb_cordic_sincos` | cos/sin against `$cos`/`$sin` over [-pi, pi] |
| `tb_oeb_block1` | columns against the circulant pattern, the W register, RB-3 writes |
| `tb_oeb_block2` | w1/w2, gamma and angles, the new vector and magnitude against a floating-point model, over four passes per trial |
| `tb_oeb_controller` | exact order of requests, selects and loads, and the cycle count, with delayed acknowledgements |
| `tb_oeb_top` | full run at the default N = 5: 13 slots, cycle count, cosine similarity ≥ 0.95, norm, phase reference. Counts basis slots, trial slots, passes using the fed-back vector and delayed acknowledgements, and fails if any never occurs |
| `tb_oeb_top_n10` | the same at N = 10 (28 slots) |

Each testbench models the feedback unit by answering after a random 0–3
cycles with tau = round(256 |h^H w|).

To simulate with Verilator 5, run from the repository root:

```
verilator --binary --timing --assert -Irtl rtl/oeb_pkg.sv tb/tb_oeb_top.sv --top-module tb_oeb_top
./obj_dir/Vtb_oeb_top
```

Replace the testbench name to run any other testbench. The `-Irtl` option
lets Verilator find the remaining modules by name. The top is parameterised
by N alone. N ≥ 3 is supported; the select widths follow from N.
