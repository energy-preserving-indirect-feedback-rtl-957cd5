// tb_oeb_block2 -- checks the Block-2 datapath against a real-number model.
//
// The testbench draws a channel h and a circulant unitary basis Q, computes
// tau_i = |Q(:,i)^H h| itself and then drives Block-2 through the N-1
// passes of the relative-angle loop, acting as controller and feedback
// registers.  In every pass it recomputes, in floating point from the same
// inputs the block received (alpha_1, alpha_2, w_opt, Q(:,i+1)):
//   w1, w2 = (a1 w_opt + e^{j pi/4 | j 7pi/4} a2 q) / sqrt(mu),
//   gamma from the measured tau~ values, theta* = atan2(-gamma_I, gamma_R),
//   the new w_opt = (a1 w_opt + e^{j theta*} a2 q)/sqrt(mu) and its dot
//   product sqrt(kappa1 + 2 kappa2 |gamma|),
// and compares (w1/w2 parts within 3/128; new w_opt parts within 0.06,
// as the angle inherits the 12-bit quantisation of kappa and gamma; dot
// product within 0.02; theta_2 =
// theta_1 + pi within 0.01 rad).  It also checks that MUX10 picks theta_1,
// that w_opt is the registered MUX2 output, and that the final vector is
// aligned with h (cosine similarity >= 0.99).
module tb_oeb_block2;
  import oeb_pkg::*;
  localparam int N = 5;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n;
  tau_t tau_tilde;
  cplx_t [N-1:0][N-1:0] q_col;
  tau_t [N-1:0] tau;
  cplx_t [N-1:0] w_optf2, w_opt, w12, w_optf1;
  fx_t dot_prod_wopt, dot_prod_woptfb;
  logic selm2, selm3, selm6, selm7, selm8, seld2, seld3, seld4, ld_tt, ld_th, ld_ej;
  logic [1:0] selm4, selm5;
  logic pick_theta2;
  int checks = 0, failures = 0;

  oeb_block2 #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real h_re [N], h_im [N];

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic real pv(input logic signed [CW-1:0] p);
    return real'(p) / 128.0;
  endfunction

  function automatic real absdot(input cplx_t [N-1:0] v);
    real sr, si;
    sr = 0.0;
    si = 0.0;
    for (int k = 0; k < N; k++) begin
      sr += h_re[k] * pv(v[k].re) + h_im[k] * pv(v[k].im);
      si += h_re[k] * pv(v[k].im) - h_im[k] * pv(v[k].re);
    end
    return $sqrt(sr * sr + si * si);
  endfunction

  function automatic tau_t tcode(input real t);
    real v;
    v = t * 256.0 + 0.5;
    if (v > 255.0) v = 255.0;
    return tau_t'(int'($floor(v)));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit near(input real a, input real b, input real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  // Expected (a1 w + e^{j ph} a2 q)/sqrt(mu), element r, compared with got.
  task automatic check_comb(input cplx_t [N-1:0] wv, input cplx_t [N-1:0] qv,
                            input real a1, input real a2, input real ph, input real tol,
                            input cplx_t [N-1:0] got, input string what);
    real mu, er, ei, qr, qi;
    mu = a1 * a1 + a2 * a2;
    for (int r = 0; r < N; r++) begin
      qr = pv(qv[r].re) * $cos(ph) - pv(qv[r].im) * $sin(ph);
      qi = pv(qv[r].re) * $sin(ph) + pv(qv[r].im) * $cos(ph);
      er = (a1 * pv(wv[r].re) + a2 * qr) / $sqrt(mu);
      ei = (a1 * pv(wv[r].im) + a2 * qi) / $sqrt(mu);
      check(near(pv(got[r].re), er, tol) && near(pv(got[r].im), ei, tol),
            $sformatf("%s element %0d: got (%f,%f) expected (%f,%f)", what, r,
                      pv(got[r].re), pv(got[r].im), er, ei));
    end
  endtask

  initial begin
    cplx_t [N-1:0] row;
    real nrm, lam [N], rr, ri, a1, a2, mu, k1, k2, t1, t2, gr, gi, th, cs, wn;
    rst_n = 1'b0;
    {selm2, selm3, selm6, selm7, selm8, seld2, seld3, seld4, ld_tt, ld_th, ld_ej} = '0;
    selm4 = '0;
    selm5 = '0;
    tau_tilde = '0;
    w_optf2 = '0;
    dot_prod_wopt = '0;
    q_col = '0;
    tau = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int trial = 0; trial < 12; trial++) begin
      nrm = 0.0;
      for (int k = 0; k < N; k++) begin
        h_re[k] = urand() - 0.5;
        h_im[k] = urand() - 0.5;
        nrm += h_re[k] ** 2 + h_im[k] ** 2;
      end
      for (int k = 0; k < N; k++) begin
        h_re[k] *= (0.6 + 0.3 * urand()) / $sqrt(nrm);
        h_im[k] *= (0.6 + 0.3 * urand()) / $sqrt(nrm);
      end
      nrm = 0.0;
      for (int k = 0; k < N; k++) nrm += h_re[k] ** 2 + h_im[k] ** 2;
      for (int m = 0; m < N; m++) lam[m] = 2.0 * PI * urand();
      for (int k = 0; k < N; k++) begin
        rr = 0.0;
        ri = 0.0;
        for (int m = 0; m < N; m++) begin
          rr += $cos(lam[m] + 2.0 * PI * m * k / N) / N;
          ri += $sin(lam[m] + 2.0 * PI * m * k / N) / N;
        end
        row[k].re = CW'(int'($floor(rr * 128.0 + 0.5)));
        row[k].im = CW'(int'($floor(ri * 128.0 + 0.5)));
      end
      for (int j = 0; j < N; j++)
        for (int r = 0; r < N; r++) q_col[j][r] = row[(j - r + N) % N];
      for (int j = 0; j < N; j++) tau[j] = tcode(absdot(q_col[j]));

      for (int k = 0; k < N - 1; k++) begin
        cplx_t [N-1:0] wv;
        selm2 = (k != 0);
        selm3 = (k != 0);
        selm4 = 2'(k);
        selm5 = 2'(k);
        wv = (k != 0) ? w_optf2 : q_col[0];
        a1 = (k != 0) ? real'(dot_prod_wopt) / 4096.0 : real'(tau[0]) / 256.0;
        a2 = real'(tau[k + 1]) / 256.0;
        // w1, measured
        selm6 = 1'b0;
        #1;
        check_comb(wv, q_col[k + 1], a1, a2, PI / 4.0, 3.0 / 128.0, w12, $sformatf("t%0d pass %0d w1", trial, k));
        tau_tilde = tcode(absdot(w12));
        seld2 = 1'b0;
        ld_tt = 1'b1;
        @(posedge clk);
        #1 ld_tt = 1'b0;
        // the W_opt register holds the MUX2 output
        for (int r = 0; r < N; r++) check(w_opt[r] == wv[r], "w_opt register");
        selm6 = 1'b1;
        #1;
        check_comb(wv, q_col[k + 1], a1, a2, 7.0 * PI / 4.0, 3.0 / 128.0, w12, $sformatf("t%0d pass %0d w2", trial, k));
        t1 = real'(dut.tt1) / 256.0;
        tau_tilde = tcode(absdot(w12));
        seld2 = 1'b1;
        ld_tt = 1'b1;
        @(posedge clk);
        #1 ld_tt = 1'b0;
        t2 = real'(tau_tilde) / 256.0;
        // angles
        for (int s = 0; s < 2; s++) begin
          selm7 = s[0];
          seld3 = s[0];
          ld_th = 1'b1;
          @(posedge clk);
          #1 ld_th = 1'b0;
        end
        for (int s = 0; s < 2; s++) begin
          selm8 = s[0];
          seld4 = s[0];
          ld_ej = 1'b1;
          @(posedge clk);
          #1 ld_ej = 1'b0;
        end
        // reference
        mu = a1 * a1 + a2 * a2;
        k1 = (a1 ** 4 + a2 ** 4) / mu;
        k2 = a1 * a2 / mu;
        gr = (t1 * t1 + t2 * t2 - 2.0 * k1) / (2.0 * $sqrt(2.0) * k2);
        gi = (t2 * t2 - t1 * t1) / (2.0 * $sqrt(2.0) * k2);
        th = $atan2(-gi, gr);
        begin
          real d;
          d = real'(dut.theta2) / 4096.0 - real'(dut.theta1) / 4096.0;
          check(near(d, PI, 0.01) || near(d, -PI, 0.01),
                $sformatf("t%0d pass %0d theta2 - theta1 = %f", trial, k, d));
        end
        check(!pick_theta2, "MUX10 picks the maximiser theta_1");
        check_comb(wv, q_col[k + 1], a1, a2, th, 0.06, w_optf1, $sformatf("t%0d pass %0d w_opt", trial, k));
        check(near(real'(dot_prod_woptfb) / 4096.0, $sqrt(k1 + 2.0 * k2 * $sqrt(gr * gr + gi * gi)), 0.02),
              $sformatf("t%0d pass %0d dot product %f expected %f", trial, k,
                        real'(dot_prod_woptfb) / 4096.0, $sqrt(k1 + 2.0 * k2 * $sqrt(gr * gr + gi * gi))));
        check(near(real'(dot_prod_woptfb) / 4096.0, absdot(w_optf1), 0.02),
              $sformatf("t%0d pass %0d dot product vs |h^H w_opt|", trial, k));
        // feedback registers
        w_optf2 = w_optf1;
        dot_prod_wopt = dot_prod_woptfb;
      end
      // final vector
      selm2 = 1'b1;
      @(posedge clk);
      #1;
      wn = 0.0;
      for (int r = 0; r < N; r++) wn += pv(w_opt[r].re) ** 2 + pv(w_opt[r].im) ** 2;
      cs = absdot(w_opt) / $sqrt(nrm * wn);
      check(cs >= 0.99, $sformatf("t%0d final cosine similarity %f", trial, cs));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
