// oeb_block2 -- Block-2 of the optimal energy beamformer: the datapath of
// the relative-angle loop (steps 8-21) of the beamforming algorithm.
//
// One pass of the loop combines the current optimal vector w_opt (with
// measured |h^H w_opt| = alpha_1) and the next basis column q = Q(:, i+1)
// (with measured tau = alpha_2):
//   Block-2a  MUX2 picks Q(:,1) or the fed-back w_opt, MUX3 picks tau_1 or
//             the fed-back dot product as alpha_1, MUX4 picks tau_{i+1} as
//             alpha_2 and MUX5 picks Q(:, i+1).  From them
//               mu = a1^2 + a2^2, kappa1 = (a1^4 + a2^4)/mu,
//               kappa2 = a1 a2 / mu,
//               w1/w2 = (a1 w_opt + e^{j phi} a2 q) / sqrt(mu),
//             with MUX6 choosing phi = pi/4 (w1) or 7pi/4 (w2).
//   gamma     DeMUX2 stores the two measured values tt1, tt2 of w1 and w2.
//             gamma_R = (tt1^2 + tt2^2 - 2 kappa1) / (2 sqrt2 kappa2),
//             gamma_I = (tt2^2 - tt1^2) / (2 sqrt2 kappa2).
//   angles    two's-complement units form -gamma_R and -gamma_I; MUX7 feeds
//             (gamma_R, -gamma_I) and then (-gamma_R, gamma_I) to a shared
//             CORDIC whose angles theta_1, theta_2 DeMUX3 stores; MUX8 feeds
//             them in turn to a second CORDIC whose (cos, sin) pairs DeMUX4
//             stores as e^{j theta_1}, e^{j theta_2}.
//   select    v_k = gamma_R cos(theta_k) - gamma_I sin(theta_k); the sign
//             bit (msb) of v_1 drives MUX10 (new vector) and MUX9 (new dot
//             product sqrt(kappa1 + 2 kappa2 v_k)).
// The new vector w_optf1 and dot product dot_prod_woptfb leave the block and
// come back, through registers outside it, as w_optf2 and dot_prod_wopt.
// w_opt is MUX2's output, registered.
//
// Follows the design: the multiplexer/demultiplexer structure, the formulas
// above, the time-sharing of each CORDIC between the two angles.
// This design's own choices, where the description is silent or
// inconsistent:
//   * gamma_I uses tt2^2 - tt1^2, from the derivation of the two linear
//     equations in gamma_R, gamma_I; the algorithm listing writes
//     tt1^2 - tt2^2, which conjugates gamma and so gives the wrong
//     relative phase.
//   * the new w_opt is divided by sqrt(mu), i.e. it is the unit-norm
//     combination of the analysis; the algorithm listing stores it
//     unnormalised, which would break the unit-norm assumption of the next
//     pass.
//   * the dot product fed back is sqrt(kappa1 + 2 kappa2 v), as written in
//     the algorithm.
//   * the CORDIC angle unit works on (numerator, denominator) pairs
//     (see oeb_cordic_atan).
//   * load enables ld_tt, ld_th, ld_ej accompany the demultiplexer selects;
//     the divisions and square roots are combinational.
//
// Timing: everything from the selected inputs to w12, w_optf1 and
// dot_prod_woptfb is combinational; tt1/tt2, theta_1/theta_2 and
// e^{j theta} registers load at the rising edge where their enable is high.
module oeb_block2
  import oeb_pkg::*;
#(
  parameter int N   = N_DEF,
  parameter int SW  = (N > 2) ? $clog2(N - 1) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  tau_t                  tau_tilde,     // measured value of w1 or w2
  input  cplx_t [N-1:0][N-1:0]  q_col,         // Q columns from Block-1
  input  tau_t  [N-1:0]         tau,           // tau_1..tau_N from Block-1
  input  cplx_t [N-1:0]         w_optf2,       // fed-back optimal vector
  input  fx_t                   dot_prod_wopt, // fed-back |h^H w_opt|
  input  logic                  selm2,         // 0: Q(:,1)  1: w_optf2
  input  logic                  selm3,         // 0: tau_1   1: dot_prod_wopt
  input  logic [SW-1:0]         selm4,         // alpha_2 = tau[selm4 + 1]
  input  logic [SW-1:0]         selm5,         // q = Q(:, selm5 + 2)
  input  logic                  selm6,         // 0: phi = pi/4  1: 7pi/4
  input  logic                  selm7,         // 0: theta_1 pair  1: theta_2 pair
  input  logic                  selm8,         // 0: theta_1  1: theta_2
  input  logic                  seld2,         // tau_tilde into 0: tt1  1: tt2
  input  logic                  ld_tt,
  input  logic                  seld3,         // angle into 0: theta_1  1: theta_2
  input  logic                  ld_th,
  input  logic                  seld4,         // (cos,sin) into 0: e^{j th1}  1: e^{j th2}
  input  logic                  ld_ej,
  output cplx_t [N-1:0]         w_opt,         // registered MUX2 output
  output cplx_t [N-1:0]         w12,           // w1 or w2 to transmit
  output cplx_t [N-1:0]         w_optf1,       // new optimal vector
  output fx_t                   dot_prod_woptfb, // its |h^H w|
  output logic                  pick_theta2    // msb: theta_2 is the maximiser
);
  // ---- Block-2a: operand selection --------------------------------------
  cplx_t [N-1:0] wsel;   // MUX2
  cplx_t [N-1:0] qsel;   // MUX5
  fx_t alpha1, alpha2;   // MUX3, MUX4

  assign wsel   = selm2 ? w_optf2 : q_col[0];
  assign qsel   = q_col[32'(selm5) + 1];
  assign alpha1 = selm3 ? dot_prod_wopt : tau_to_fx(tau[0]);
  assign alpha2 = tau_to_fx(tau[32'(selm4) + 1]);

  // ---- Block-2a: kappa, mu ----------------------------------------------
  fx_t a1sq, a2sq, a1q, a2q, mu, sqrt_mu, kappa1, kappa2, a1a2;
  always_comb begin
    a1sq    = fx_mul(alpha1, alpha1);
    a2sq    = fx_mul(alpha2, alpha2);
    a1q     = fx_mul(a1sq, a1sq);
    a2q     = fx_mul(a2sq, a2sq);
    mu      = fx_add(a1sq, a2sq);
    kappa1  = fx_div(fx_add(a1q, a2q), mu);
    a1a2    = fx_mul(alpha1, alpha2);
    kappa2  = fx_div(a1a2, mu);
    sqrt_mu = fx_sqrt(mu);
  end

  // ---- Block-2a: w1 / w2 -------------------------------------------------
  cfx_t [N-1:0] a1w;     // alpha1 * w_opt
  cfx_t [N-1:0] a2q_v;   // alpha2 * Q(:, i+1)
  cfx_t         ephi;    // MUX6
  always_comb begin
    ephi.re = FX_INVSQRT2;
    ephi.im = selm6 ? fx_t'(-FX_INVSQRT2) : FX_INVSQRT2;
    for (int k = 0; k < N; k++) begin
      a1w[k]   = cfx_scale(cplx_to_cfx(wsel[k]), alpha1);
      a2q_v[k] = cfx_scale(cplx_to_cfx(qsel[k]), alpha2);
      w12[k]   = cfx_to_cplx(cfx_div(cfx_add(a1w[k], cfx_mul(a2q_v[k], ephi)),
                                     sqrt_mu));
    end
  end

  // ---- DeMUX2 and the gamma computation ----------------------------------
  tau_t tt1, tt2;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tt1 <= '0;
      tt2 <= '0;
    end else if (ld_tt) begin
      if (seld2) tt2 <= tau_tilde;
      else       tt1 <= tau_tilde;
    end
  end

  fx_t tt1sq, tt2sq, den, gamma_r, gamma_i, ngamma_r, ngamma_i;
  always_comb begin
    tt1sq    = fx_mul(tau_to_fx(tt1), tau_to_fx(tt1));
    tt2sq    = fx_mul(tau_to_fx(tt2), tau_to_fx(tt2));
    den      = fx_mul(kappa2, FX_2SQRT2);
    gamma_r  = fx_div(fx_sub(fx_add(tt1sq, tt2sq), fx_add(kappa1, kappa1)), den);
    gamma_i  = fx_div(fx_sub(tt2sq, tt1sq), den);
    ngamma_r = fx_sub('0, gamma_r);   // 2CU
    ngamma_i = fx_sub('0, gamma_i);   // 2CU
  end

  // ---- MUX7, angle CORDIC, DeMUX3 -----------------------------------------
  fx_t cx, cy, cangle, theta1, theta2;
  assign cx = selm7 ? ngamma_r : gamma_r;
  assign cy = selm7 ? gamma_i  : ngamma_i;

  oeb_cordic_atan u_cordic_atan (.x(cx), .y(cy), .angle(cangle));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      theta1 <= '0;
      theta2 <= '0;
    end else if (ld_th) begin
      if (seld3) theta2 <= cangle;
      else       theta1 <= cangle;
    end
  end

  // ---- MUX8, sin/cos CORDIC, DeMUX4 --------------------------------------
  fx_t  cos_v, sin_v;
  cfx_t ej1, ej2;
  oeb_cordic_sincos u_cordic_sincos (.angle(selm8 ? theta2 : theta1),
                                     .cos_o(cos_v), .sin_o(sin_v));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ej1 <= '0;
      ej2 <= '0;
    end else if (ld_ej) begin
      if (seld4) begin
        ej2.re <= cos_v;
        ej2.im <= sin_v;
      end else begin
        ej1.re <= cos_v;
        ej1.im <= sin_v;
      end
    end
  end

  // ---- maximiser selection, MUX9 and MUX10 --------------------------------
  fx_t v1, v2, dp_sel;
  cfx_t [N-1:0] cand;
  always_comb begin
    v1 = fx_sub(fx_mul(gamma_r, ej1.re), fx_mul(gamma_i, ej1.im));
    v2 = fx_sub(fx_mul(gamma_r, ej2.re), fx_mul(gamma_i, ej2.im));
    pick_theta2 = v1[DW-1];
    dp_sel = pick_theta2 ? fx_add(kappa1, fx_mul(fx_add(kappa2, kappa2), v2))
                         : fx_add(kappa1, fx_mul(fx_add(kappa2, kappa2), v1));
    dot_prod_woptfb = fx_sqrt(dp_sel);
    for (int k = 0; k < N; k++) begin
      cand[k]    = cfx_add(a1w[k], cfx_mul(a2q_v[k], pick_theta2 ? ej2 : ej1));
      w_optf1[k] = cfx_to_cplx(cfx_div(cand[k], sqrt_mu));
    end
  end

  // ---- W_opt output register (MUX2 output) --------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) w_opt <= '0;
    else        w_opt <= wsel;
  end

  a_selm4_range : assert property (@(posedge clk) disable iff (!rst_n)
                                   ld_tt |-> 32'(selm4) < N - 1);
endmodule
