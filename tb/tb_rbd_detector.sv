// tb_rbd_detector: end-to-end test of the detector. For every frame it draws a
// random channel H (unit-power columns), QPSK symbols s, noise n and
// y = H s + n, streams the rows of H with y(n) into the detector with random
// gaps, and compares s_hat bit for bit with the reference chain (Gram matrix,
// matched filter, MINRES or CR) computed with the reference arithmetic.
// It also checks the residual norm against s = 0, the hard QPSK decisions,
// and the cycles from the last row to done.
// Mechanisms that must occur at least once: CR frames, MINRES frames, a switch
// of algorithm between consecutive frames, input gaps (in_valid low inside a
// frame), an all-zero frame (zero divisors in the coefficient modules) and a
// frame run with fewer iterations than ITER (n_iter = 2).
module tb_rbd_detector;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int N      = 16;
  localparam int M      = 4;
  localparam int ITER   = 3;
  localparam int FRAMES = 12;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start, in_valid;
  alg_e  alg;
  logic [$clog2(ITER+1)-1:0] n_iter;
  fix_t  sigma2;
  cplx_t h_row [M], y_n, s_hat [M];
  logic  busy, done;
  int    checks = 0, failures = 0;
  int    n_cr = 0, n_minres = 0, n_switch = 0, n_gap = 0, n_zero = 0, n_short = 0;

  rbd_detector #(.N(N), .M(M), .ITER(ITER)) dut (
    .clk, .rst_n, .start, .alg, .n_iter, .sigma2, .in_valid, .h_row, .y_n, .s_hat, .busy, .done
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  function automatic int unit_cycles(alg_e al, int k);
    if (al == ALG_CR) return M + 5 + 4 * k + (k - 1) * (M + 6);
    else              return 3 + k * (2 * M + 6);
  endfunction

  initial begin
    rc_t   h [N][M];
    rc_t   y [N];
    rc_t   sym [M];
    rmat_t ra;
    rvec_t rye, sref, sgot;
    alg_e  prev_alg;
    int    amp, s2, cyc, qam, k;
    amp = int'(65536.0 * $sqrt(1.5 / N));  // uniform parts, E|h|^2 = 1/N
    qam = 46341;                           // 1/sqrt(2) in Q16
    s2  = 655;                             // sigma2 = 0.01
    start = 1'b0; in_valid = 1'b0; alg = ALG_CR; sigma2 = '0; y_n = CZERO;
    prev_alg = ALG_CR;
    for (int i = 0; i < M; i++) h_row[i] = CZERO;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < FRAMES; f++) begin
      bit zero_frame;
      zero_frame = (f == FRAMES - 2);
      // --- stimulus and reference ---
      for (int i = 0; i < M; i++)
        sym[i] = mk(($urandom_range(1, 0) != 0) ? qam : -qam, ($urandom_range(1, 0) != 0) ? qam : -qam);
      for (int n = 0; n < N; n++) begin
        for (int i = 0; i < M; i++) h[n][i] = zero_frame ? mk(0, 0) : rnd(amp);
        y[n] = zero_frame ? mk(0, 0) : rnd(300);   // noise
        for (int i = 0; i < M; i++) y[n] = radd(y[n], rmul(h[n][i], sym[i]));
      end
      for (int i = 0; i < MAXM; i++) begin
        rye[i] = mk(0, 0);
        sgot[i] = mk(0, 0);
        for (int j = 0; j < MAXM; j++) ra[i][j] = mk(0, 0);
      end
      for (int i = 0; i < M; i++) begin
        for (int n = 0; n < N; n++) rye[i] = radd(rye[i], rmul(rconj(h[n][i]), y[n]));
        for (int j = 0; j <= i; j++) begin
          ra[i][j] = (i == j) ? mk(s2, 0) : mk(0, 0);
          for (int n = 0; n < N; n++) ra[i][j] = radd(ra[i][j], rmul(rconj(h[n][i]), h[n][j]));
        end
      end
      // the array computes the lower triangle; the upper one is its conjugate
      for (int i = 0; i < M; i++)
        for (int j = i + 1; j < M; j++) ra[i][j] = rconj(ra[j][i]);
      alg = (f % 3 == 1) ? ALG_MINRES : ALG_CR;
      k   = (f % 4 == 3) ? 2 : ITER;
      sref = (alg == ALG_CR) ? ref_cr(M, k, ra, rye) : ref_minres(M, k, ra, rye);
      if (k < ITER) n_short++;
      if (f > 0 && alg != prev_alg) n_switch++;
      prev_alg = alg;
      if (alg == ALG_CR) n_cr++; else n_minres++;
      if (zero_frame) n_zero++;
      // --- drive the frame ---
      @(negedge clk);
      check(!busy, "busy before frame");
      start = 1'b1; sigma2 = fix_t'(s2);
      n_iter = (k == ITER) ? '0 : ($bits(n_iter))'(k);
      @(negedge clk);
      start = 1'b0;
      alg = ALG_CR;     // sampled at start only
      n_iter = '1;
      for (int n = 0; n < N; n++) begin
        while ($urandom_range(4, 0) == 0) begin
          in_valid = 1'b0;
          y_n = to_cx(rnd(9999));
          n_gap++;
          @(negedge clk);
        end
        in_valid = 1'b1;
        y_n = to_cx(y[n]);
        for (int i = 0; i < M; i++) h_row[i] = to_cx(h[n][i]);
        @(negedge clk);
      end
      in_valid = 1'b0;
      cyc = 1;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      // A is complete 2M edges after the last row; the unit starts in that cycle
      check(cyc == 2 * M - 1 + unit_cycles(prev_alg, k),
            $sformatf("frame %0d: %0d cycles from last row to done, expected %0d", f, cyc,
                      2 * M - 1 + unit_cycles(prev_alg, k)));
      for (int i = 0; i < M; i++) begin
        sgot[i] = to_rc(s_hat[i]);
        check(sgot[i] == sref[i], $sformatf("frame %0d %s s[%0d] got (%0d,%0d) exp (%0d,%0d)", f,
              prev_alg.name(), i, sgot[i].re, sgot[i].im, sref[i].re, sref[i].im));
      end
      if (zero_frame) begin
        for (int i = 0; i < M; i++) check(sgot[i] == mk(0, 0), "zero frame must give s = 0");
      end else begin
        real r_end, r_zero;
        r_end  = resid2(M, ra, rye, sgot);
        r_zero = resid2(M, ra, rye, '{default: mk(0, 0)});
        check(r_end < r_zero, $sformatf("frame %0d residual not reduced", f));
        for (int i = 0; i < M; i++)
          check(((sgot[i].re < 0) == (sym[i].re < 0)) && ((sgot[i].im < 0) == (sym[i].im < 0)),
                $sformatf("frame %0d: wrong QPSK decision for user %0d", f, i));
        $display("frame %0d %s residual^2 %g (s=0: %g)", f, prev_alg.name(), r_end, r_zero);
      end
    end
    check(n_cr > 0,     "no CR frame");
    check(n_minres > 0, "no MINRES frame");
    check(n_switch > 0, "no algorithm switch");
    check(n_gap > 0,    "no input gap");
    check(n_zero > 0,   "no zero frame");
    check(n_short > 0,  "no frame with fewer than ITER iterations");
    $display("mechanisms: cr=%0d minres=%0d switch=%0d gap_cycles=%0d zero=%0d short=%0d",
             n_cr, n_minres, n_switch, n_gap, n_zero, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
