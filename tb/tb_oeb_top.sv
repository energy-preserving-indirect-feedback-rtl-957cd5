// tb_oeb_top -- end-to-end test of the optimal energy beamformer.
//
// The testbench plays the channel and the feedback unit.  For each trial it
// draws an N-antenna Rician channel h = sqrt(K/(K+1)) a(phi) +
// sqrt(1/(K+1)) g (a(phi) a uniform-linear-array line-of-sight vector,
// g complex Gaussian), cycling through K = 2, K = 10 and a pure line of
// sight, and scales it to a random norm in [0.5, 0.95] of the 8-bit tau
// full scale.  It draws a circulant unitary basis Q (first row = inverse DFT
// of unit-modulus eigenvalues with random phases, quantised to Q1.7).
// Whenever the design requests a measurement it waits a random 0..3 cycles
// and answers with ack_sig and tau = round(256 |h^H w|) of the vector on
// air, which is what the external time-to-recharge feedback unit would
// deliver.
//
// Checks per trial: N basis slots and 2(N-1) trial slots (3N-2 in all);
// the cycle count from start to done; the cosine similarity between w_opt
// and h (>= 0.95); the norm of w_opt (0.9..1.1); and that w_opt carries no
// phase on the first basis direction (the common phase is that of
// zeta_1 = Q(:,1)^H h, so Q(:,1)^H w_opt must be real and positive).
// Mechanism counters: basis slots, trial slots, loop passes using the fed-back
// vector, delayed acknowledgements.  Each must occur at least once.
// Runs with the default N = 5, so it is also the full-size test.
module tb_oeb_top;
  import oeb_pkg::*;

  localparam int N      = N_DEF;
  localparam int TRIALS = 30;
  localparam real PI    = 3.14159265358979;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          start;
  cplx_t [N-1:0] q_row;
  logic          ack_sig;
  tau_t          tau_i, tau_tilde;
  cplx_t [N-1:0] w, w12, w_opt;
  logic          w_req, w12_req, done, pick_theta2;

  oeb_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_basis = 0, n_trial = 0, n_fb_pass = 0, n_stall = 0, n_theta2 = 0;

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real h_re [N], h_im [N];

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = urand() + 1.0e-9;
    u2 = urand();
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic real part_val(input logic signed [CW-1:0] p);
    return real'(p) / 128.0;
  endfunction

  // |h^H v| for a vector in the design's format.
  function automatic real absdot(input cplx_t [N-1:0] v);
    real sr, si;
    sr = 0.0;
    si = 0.0;
    for (int k = 0; k < N; k++) begin
      // conj(h_k) * v_k
      sr += h_re[k] * part_val(v[k].re) + h_im[k] * part_val(v[k].im);
      si += h_re[k] * part_val(v[k].im) - h_im[k] * part_val(v[k].re);
    end
    return $sqrt(sr * sr + si * si);
  endfunction

  function automatic tau_t tau_code(input cplx_t [N-1:0] v);
    real t;
    t = absdot(v) * 256.0 + 0.5;
    if (t > 255.0) t = 255.0;
    return tau_t'(int'($floor(t)));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Serves one measurement request; returns the delay used.
  task automatic serve(input bit trial, output int delay);
    delay = $urandom_range(0, 3);
    repeat (delay) @(posedge clk);
    #1;
    ack_sig = 1'b1;
    if (trial) tau_tilde = tau_code(w12);
    else       tau_i     = tau_code(w);
    @(posedge clk);
    #1;
    ack_sig = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0;
    start = 1'b0;
    ack_sig = 1'b0;
    tau_i = '0;
    tau_tilde = '0;
    q_row = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int t = 0; t < TRIALS; t++) begin
      real kf, los_phi, hn, sc, lam_ph [N];
      real r_re, r_im, nrm, dr, di, wr, wi, cs, wn;
      int  basis_slots, trial_slots, cycles, delays, d;

      // ---- channel --------------------------------------------------------
      los_phi = (urand() - 0.5) * PI;
      kf = (t % 3 == 0) ? 2.0 : (t % 3 == 1) ? 10.0 : -1.0;  // -1: pure LoS
      nrm = 0.0;
      for (int k = 0; k < N; k++) begin
        real lr, li;
        lr = $cos(PI * k * $sin(los_phi));
        li = $sin(PI * k * $sin(los_phi));
        if (kf < 0.0) begin
          h_re[k] = lr;
          h_im[k] = li;
        end else begin
          h_re[k] = $sqrt(kf / (kf + 1.0)) * lr + $sqrt(0.5 / (kf + 1.0)) * gauss();
          h_im[k] = $sqrt(kf / (kf + 1.0)) * li + $sqrt(0.5 / (kf + 1.0)) * gauss();
        end
        nrm += h_re[k] * h_re[k] + h_im[k] * h_im[k];
      end
      hn = 0.5 + 0.45 * urand();
      sc = hn / $sqrt(nrm);
      for (int k = 0; k < N; k++) begin
        h_re[k] *= sc;
        h_im[k] *= sc;
      end

      // ---- circulant unitary basis: first row = IDFT(unit eigenvalues) ----
      for (int m = 0; m < N; m++) lam_ph[m] = 2.0 * PI * urand();
      for (int k = 0; k < N; k++) begin
        r_re = 0.0;
        r_im = 0.0;
        for (int m = 0; m < N; m++) begin
          r_re += $cos(lam_ph[m] + 2.0 * PI * m * k / N) / N;
          r_im += $sin(lam_ph[m] + 2.0 * PI * m * k / N) / N;
        end
        q_row[k].re = CW'(int'($floor(r_re * 128.0 + 0.5)));
        q_row[k].im = CW'(int'($floor(r_im * 128.0 + 0.5)));
      end

      // ---- run ------------------------------------------------------------
      @(posedge clk);
      #1 start = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      cycles = 1;
      basis_slots = 0;
      trial_slots = 0;
      delays = 0;
      while (!done) begin
        if (w_req) begin
          basis_slots++;
          serve(1'b0, d);
          delays += d;
          cycles += d + 1;
          if (d > 0) n_stall++;
        end else if (w12_req) begin
          trial_slots++;
          if (dut.u_block2.selm2) n_fb_pass++;
          serve(1'b1, d);
          delays += d;
          cycles += d + 1;
          if (d > 0) n_stall++;
        end else begin
          @(posedge clk);
          #1;
          cycles++;
        end
      end
      n_basis += basis_slots;
      n_trial += trial_slots;
      if (pick_theta2) n_theta2++;

      check(basis_slots == N, $sformatf("trial %0d: %0d basis slots", t, basis_slots));
      check(trial_slots == 2 * (N - 1),
            $sformatf("trial %0d: %0d trial slots", t, trial_slots));
      // cycles counts the start cycle too: done must rise
      // 1 + 2N + 7(N-1) + 1 edges after the edge that samples start.
      check(cycles == 1 + (1 + 2 * N + 7 * (N - 1) + 1) + delays,
            $sformatf("trial %0d: %0d cycles, expected %0d", t, cycles,
                      1 + (1 + 2 * N + 7 * (N - 1) + 1) + delays));

      // ---- quality of w_opt ------------------------------------------------
      wn = 0.0;
      for (int k = 0; k < N; k++)
        wn += part_val(w_opt[k].re) ** 2 + part_val(w_opt[k].im) ** 2;
      wn = $sqrt(wn);
      cs = absdot(w_opt) / (hn * wn);
      // Q(:,1)^H w_opt, with Q(r,1) = q_row[(N - r) % N]
      dr = 0.0;
      di = 0.0;
      for (int r = 0; r < N; r++) begin
        real qr, qi;
        qr = part_val(q_row[(N - r) % N].re);
        qi = part_val(q_row[(N - r) % N].im);
        wr = part_val(w_opt[r].re);
        wi = part_val(w_opt[r].im);
        dr += qr * wr + qi * wi;
        di += qr * wi - qi * wr;
      end
      $display("trial %0d K=%0.0f |h|=%0.3f cos_sim=%0.4f |w_opt|=%0.3f phase1=%0.3f",
               t, kf, hn, cs, wn, $atan2(di, dr));
      check(cs >= 0.95, $sformatf("trial %0d: cosine similarity %0.4f", t, cs));
      check(wn > 0.9 && wn < 1.1, $sformatf("trial %0d: |w_opt| = %0.3f", t, wn));
      check($atan2(di, dr) > -0.2 && $atan2(di, dr) < 0.2,
            $sformatf("trial %0d: phase on Q(:,1) = %0.3f", t, $atan2(di, dr)));
    end

    $display("mechanisms: basis slots %0d, trial slots %0d, fed-back passes %0d, delayed acks %0d, theta2 picks %0d",
             n_basis, n_trial, n_fb_pass, n_stall, n_theta2);
    check(n_basis > 0, "no basis slot");
    check(n_trial > 0, "no trial slot");
    check(n_fb_pass > 0, "no pass with the fed-back vector");
    check(n_stall > 0, "no delayed acknowledgement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
