// tb_workloads: the evaluated uplink configurations with 64-QAM, run on the
// detector at its default sizes (N = 128, M = 16): 128 x 16 (i.i.d. channel)
// and 128 x 8, for which the eight unused user columns of H are driven with
// zeros. Channels follow the Kronecker model H = Rr^(1/2) W Rt^(1/2)
// with exponential correlation (zeta^|i-k|, phase theta = 0), for the four
// cases uncorrelated, user-correlated (zeta_t = 0.2), BS-correlated
// (zeta_r = 0.3) and fully correlated; Cholesky factors stand in for the
// matrix square roots (same channel statistics). Each case runs CR with
// k = 2, 3, 4 and MINRES with k = 4.
// Checks: the active users' estimates are bit-identical to the reference
// detector run on the system of that size (for 128 x 8 this shows that zero
// padding changes nothing), padded users' outputs are exactly 0, every run
// lowers the residual below that of s = 0, and for 128 x 8 CR with k = 4
// recovers every 64-QAM symbol at the high SNR used. Symbol errors of
// the other runs are printed, not checked.
// A Monte-Carlo part then runs MC_FRAMES random 128 x 8 uncorrelated frames
// at a noise level (std 0.1 per real dimension) where even the exact MMSE
// solution, computed in floating point, misjudges about one decision in ten.
// Each frame is detected by CR and by MINRES with k = 4, bit-checked against
// the reference; CR's decision errors must stay within 25 % (+3) of the
// exact MMSE detector's.
module tb_workloads;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int N  = 128;
  localparam int M  = 16;
  localparam int MC_FRAMES = 200;   // Monte-Carlo frames

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start, in_valid;
  alg_e  alg;
  logic [2:0] n_iter;
  fix_t  sigma2;
  cplx_t h_row [M], y_n, s_hat [M];
  logic  busy, done;
  int    checks = 0, failures = 0;

  rbd_detector dut (
    .clk, .rst_n, .start, .alg, .n_iter, .sigma2, .in_valid, .h_row, .y_n, .s_hat, .busy, .done
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // lower Cholesky factor of the exponential correlation matrix zeta^|i-k|
  real lr [N][N];
  real lt [M][M];

  task automatic chol_exp(int n, real zeta, output real l [N][N]);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) l[i][j] = 0.0;
    for (int j = 0; j < n; j++) begin
      real d = zeta ** real'(0);
      for (int k = 0; k < j; k++) d -= l[j][k] * l[j][k];
      l[j][j] = $sqrt(d);
      for (int i = j + 1; i < n; i++) begin
        real v = (zeta == 0.0) ? 0.0 : zeta ** real'(i - j);
        for (int k = 0; k < j; k++) v -= l[i][k] * l[j][k];
        l[i][j] = v / l[j][j];
      end
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1))) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic int qam_level(int idx);  // {-7,-5,...,7}/sqrt(42) in Q16
    return int'($rtoi((2.0 * idx - 7.0) / $sqrt(42.0) * 65536.0));
  endfunction

  function automatic int qam_slice(longint v);  // nearest level index
    real x = real'(v) / 65536.0 * $sqrt(42.0);
    int  k = $rtoi((x + 7.0) / 2.0 + 0.5 + 8.0) - 8;
    if (k < 0) k = 0;
    if (k > 7) k = 7;
    return k;
  endfunction

  // One frame through the detector: start, N rows, wait for done.
  task automatic run_frame(input rc_t h [N][M], input rc_t y [N], input alg_e a_sel,
                           input int k_sel, input int s2_sel);
    @(negedge clk);
    start = 1'b1; alg = a_sel; sigma2 = fix_t'(s2_sel); n_iter = 3'(k_sel);
    @(negedge clk);
    start = 1'b0;
    for (int n = 0; n < N; n++) begin
      in_valid = 1'b1;
      y_n = to_cx(y[n]);
      for (int i = 0; i < M; i++) h_row[i] = to_cx(h[n][i]);
      @(negedge clk);
    end
    in_valid = 1'b0;
    while (!done) @(negedge clk);
  endtask

  // A, y_E of the first mu users, as the reference computes them
  task automatic ref_system(input rc_t h [N][M], input rc_t y [N], input int mu,
                            input int s2_sel, output rmat_t ra, output rvec_t rye);
    for (int i = 0; i < MAXM; i++) begin
      rye[i] = mk(0, 0);
      for (int j = 0; j < MAXM; j++) ra[i][j] = mk(0, 0);
    end
    for (int i = 0; i < mu; i++) begin
      for (int n = 0; n < N; n++) rye[i] = radd(rye[i], rmul(rconj(h[n][i]), y[n]));
      for (int j = 0; j <= i; j++) begin
        ra[i][j] = (i == j) ? mk(s2_sel, 0) : mk(0, 0);
        for (int n = 0; n < N; n++) ra[i][j] = radd(ra[i][j], rmul(rconj(h[n][i]), h[n][j]));
      end
    end
    for (int i = 0; i < mu; i++)
      for (int j = i + 1; j < mu; j++) ra[i][j] = rconj(ra[j][i]);
  endtask

  initial begin
    real   zt [4], zr [4];
    real   wr [N][M], wi [N][M], tr [N][M], ti [N][M];
    rc_t   h [N][M];
    rc_t   y [N];
    int    sre [M], sim [M];
    int    MU;
    rmat_t ra;
    rvec_t rye, sref;
    int    s2, k, errs;
    string cname [4];
    zt = '{0.0, 0.2, 0.0, 0.2};
    zr = '{0.0, 0.0, 0.3, 0.3};
    cname = '{"uncorrelated", "user-correlated", "BS-correlated", "fully correlated"};
    s2 = 66;                  // sigma2 = 0.001
    start = 1'b0; in_valid = 1'b0; alg = ALG_CR; n_iter = '0; sigma2 = '0; y_n = CZERO;
    for (int i = 0; i < M; i++) h_row[i] = CZERO;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cs = 0; cs < 5; cs++) begin
      int c;
      c  = (cs == 4) ? 0 : cs;   // case 4: 128 x 16, uncorrelated
      MU = (cs == 4) ? 16 : 8;
      chol_exp(N, zr[c], lr);
      begin
        real tmp [N][N];
        chol_exp(MU, zt[c], tmp);
        for (int i = 0; i < MU; i++) for (int j = 0; j < MU; j++) lt[i][j] = tmp[i][j];
      end
      for (int run = 0; run < 4; run++) begin
        alg = (run == 3) ? ALG_MINRES : ALG_CR;
        k   = (run == 3) ? 4 : run + 2;
        // channel: H = Lr W Lt^T, W ~ CN(0, 1/N)
        for (int n = 0; n < N; n++)
          for (int j = 0; j < MU; j++) begin
            wr[n][j] = gauss() / $sqrt(2.0 * N);
            wi[n][j] = gauss() / $sqrt(2.0 * N);
          end
        for (int n = 0; n < N; n++)
          for (int j = 0; j < MU; j++) begin
            tr[n][j] = 0.0; ti[n][j] = 0.0;
            for (int q = 0; q <= j; q++) begin   // W Lt^T
              tr[n][j] += wr[n][q] * lt[j][q];
              ti[n][j] += wi[n][q] * lt[j][q];
            end
          end
        for (int n = 0; n < N; n++) begin
          for (int j = 0; j < M; j++) h[n][j] = mk(0, 0);
          for (int j = 0; j < MU; j++) begin
            real hr, hi;
            hr = 0.0; hi = 0.0;
            for (int q = 0; q <= n; q++) begin   // Lr (W Lt^T)
              hr += lr[n][q] * tr[q][j];
              hi += lr[n][q] * ti[q][j];
            end
            h[n][j] = mk(longint'($rtoi(hr * 65536.0)), longint'($rtoi(hi * 65536.0)));
          end
        end
        for (int j = 0; j < MU; j++) begin
          sre[j] = $urandom_range(7, 0);
          sim[j] = $urandom_range(7, 0);
        end
        for (int n = 0; n < N; n++) begin
          y[n] = mk(longint'($rtoi(gauss() * 0.0224 * 65536.0)), longint'($rtoi(gauss() * 0.0224 * 65536.0)));
          for (int j = 0; j < MU; j++)
            y[n] = radd(y[n], rmul(h[n][j], mk(qam_level(sre[j]), qam_level(sim[j]))));
        end
        // reference on the MU x MU system
        for (int i = 0; i < MAXM; i++) begin
          rye[i] = mk(0, 0);
          for (int j = 0; j < MAXM; j++) ra[i][j] = mk(0, 0);
        end
        for (int i = 0; i < MU; i++) begin
          for (int n = 0; n < N; n++) rye[i] = radd(rye[i], rmul(rconj(h[n][i]), y[n]));
          for (int j = 0; j <= i; j++) begin
            ra[i][j] = (i == j) ? mk(s2, 0) : mk(0, 0);
            for (int n = 0; n < N; n++) ra[i][j] = radd(ra[i][j], rmul(rconj(h[n][i]), h[n][j]));
          end
        end
        for (int i = 0; i < MU; i++)
          for (int j = i + 1; j < MU; j++) ra[i][j] = rconj(ra[j][i]);
        sref = (alg == ALG_CR) ? ref_cr(MU, k, ra, rye) : ref_minres(MU, k, ra, rye);
        // drive the frame
        @(negedge clk);
        start = 1'b1; sigma2 = fix_t'(s2); n_iter = 3'(k);
        @(negedge clk);
        start = 1'b0;
        for (int n = 0; n < N; n++) begin
          in_valid = 1'b1;
          y_n = to_cx(y[n]);
          for (int i = 0; i < M; i++) h_row[i] = to_cx(h[n][i]);
          @(negedge clk);
        end
        in_valid = 1'b0;
        while (!done) @(negedge clk);
        errs = 0;
        for (int i = 0; i < M; i++) begin
          if (i < MU) begin
            check(to_rc(s_hat[i]) == sref[i], $sformatf("%s %s k=%0d user %0d differs from the reference",
                  cname[c], alg.name(), k, i));
            if (qam_slice(longint'(s_hat[i].re)) != sre[i] || qam_slice(longint'(s_hat[i].im)) != sim[i]) errs++;
          end else begin
            check(s_hat[i] == CZERO, $sformatf("padded user %0d not zero", i));
          end
        end
        begin
          rvec_t sh, z;
          for (int i = 0; i < MAXM; i++) begin
            sh[i] = (i < M) ? to_rc(s_hat[i]) : mk(0, 0);
            z[i]  = mk(0, 0);
          end
          check(resid2(MU, ra, rye, sh) < resid2(MU, ra, rye, z),
                $sformatf("%s %s k=%0d: residual not reduced", cname[c], alg.name(), k));
        end
        if (alg == ALG_CR && k == 4 && MU == 8)
          check(errs == 0, $sformatf("%s CR k=4: %0d symbol errors", cname[c], errs));
        $display("128x%0d %-16s %s k=%0d: %0d of %0d 64-QAM symbols wrong", MU, cname[c], alg.name(), k, errs, MU);
      end
    end
    // Monte-Carlo: 128 x 8, uncorrelated, at a noise level where the exact
    // MMSE detector makes errors; CR k = 4 must stay close to it.
    begin
      int e_cr, e_mr, e_ex, sym;
      real xr [MAXM], xi [MAXM];
      real ns;
      ns = 0.1;                 // noise std per real dimension
      s2 = 1311;                // sigma2 = 2 ns^2 = 0.02
      e_cr = 0; e_mr = 0; e_ex = 0; sym = 0;
      MU = 8;
      for (int f = 0; f < MC_FRAMES; f++) begin
        for (int n = 0; n < N; n++) begin
          for (int j = 0; j < M; j++)
            h[n][j] = (j < MU) ? mk(longint'($rtoi(gauss() / $sqrt(2.0 * N) * 65536.0)),
                                    longint'($rtoi(gauss() / $sqrt(2.0 * N) * 65536.0))) : mk(0, 0);
        end
        for (int j = 0; j < MU; j++) begin
          sre[j] = $urandom_range(7, 0);
          sim[j] = $urandom_range(7, 0);
        end
        for (int n = 0; n < N; n++) begin
          y[n] = mk(longint'($rtoi(gauss() * ns * 65536.0)), longint'($rtoi(gauss() * ns * 65536.0)));
          for (int j = 0; j < MU; j++)
            y[n] = radd(y[n], rmul(h[n][j], mk(qam_level(sre[j]), qam_level(sim[j]))));
        end
        ref_system(h, y, MU, s2, ra, rye);
        solve_exact(MU, ra, rye, xr, xi);
        for (int j = 0; j < MU; j++) begin
          if (qam_slice(longint'($rtoi(xr[j] * 65536.0))) != sre[j]) e_ex++;
          if (qam_slice(longint'($rtoi(xi[j] * 65536.0))) != sim[j]) e_ex++;
        end
        for (int run = 0; run < 2; run++) begin
          alg = (run == 0) ? ALG_CR : ALG_MINRES;
          sref = (run == 0) ? ref_cr(MU, 4, ra, rye) : ref_minres(MU, 4, ra, rye);
          run_frame(h, y, alg, 4, s2);
          for (int j = 0; j < MU; j++) begin
            check(to_rc(s_hat[j]) == sref[j], $sformatf("Monte-Carlo frame %0d %s user %0d differs from the reference",
                  f, alg.name(), j));
            errs = int'(qam_slice(longint'(s_hat[j].re)) != sre[j]) + int'(qam_slice(longint'(s_hat[j].im)) != sim[j]);
            if (run == 0) e_cr += errs; else e_mr += errs;
          end
        end
        sym += 2 * MU;
      end
      $display("Monte-Carlo 128x8 64-QAM, %0d frames, %0d PAM decisions: exact MMSE %0d errors, CR k=4 %0d, MINRES k=4 %0d",
               MC_FRAMES, sym, e_ex, e_cr, e_mr);
      check(e_ex > 0, "Monte-Carlo: noise level gives no errors, nothing is compared");
      check(e_cr <= e_ex + e_ex / 4 + 3, $sformatf("Monte-Carlo: CR k=4 %0d errors against %0d of exact MMSE", e_cr, e_ex));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
