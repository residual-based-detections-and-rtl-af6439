// tb_rbd_unit: runs the unified MINRES/CR unit on random MMSE systems
// A = H^H H + sigma2*I, y_E = H^H y (built with the reference arithmetic).
// Two instances: ITER = 4, run with 2, 3 and 4 iterations (n_iter = 2, 3 and
// 0 or an out-of-range value), and ITER = M (CR then reaches the exact
// solution up to rounding). Checks, for both algorithms: s bit-exact against the
// reference MINRES / CR, the cycle count from start to done against the
// documented formulas, that the residual norm is below that of s = 0, the
// near-exact CR result at ITER = M, and an all-zero y_E (zero divisors) giving
// s = 0.
module tb_rbd_unit;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int M  = 5;
  localparam int NR = 16;   // channel rows used to build A

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start [2];
  alg_e  alg;
  logic [2:0] n_iter [2];
  cplx_t a [M][M], y_e [M];
  cplx_t s0 [M], s1 [M];
  logic  busy [2], done [2];
  int    checks = 0, failures = 0;

  rbd_unit #(.M(M), .ITER(4)) dut0 (.clk, .rst_n, .start(start[0]), .alg, .n_iter(n_iter[0][2:0]), .a, .y_e,
                                    .s(s0), .busy(busy[0]), .done(done[0]));
  rbd_unit #(.M(M), .ITER(M)) dut1 (.clk, .rst_n, .start(start[1]), .alg, .n_iter(n_iter[1][2:0]), .a, .y_e,
                                    .s(s1), .busy(busy[1]), .done(done[1]));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  function automatic int exp_cycles(alg_e al, int iters);
    if (al == ALG_CR) return M + 5 + 4 * iters + (iters - 1) * (M + 6);
    else              return 3 + iters * (2 * M + 6);
  endfunction

  // n_iter_in is driven on the n_iter input; iters is the count it must select
  task automatic run(int which, int n_iter_in, int iters, rmat_t ra, rvec_t rye, bit zero_case);
    rvec_t sref, sgot;
    int    cyc;
    real   r_end, r_zero;
    sref = (alg == ALG_CR) ? ref_cr(M, iters, ra, rye) : ref_minres(M, iters, ra, rye);
    @(negedge clk);
    start[which] = 1'b1;
    n_iter[which] = 3'(n_iter_in);
    cyc = 1;
    @(negedge clk);
    start[which] = 1'b0;
    n_iter[which] = 3'($urandom_range(7, 0));  // sampled at start only
    cyc++;
    while (!done[which] && cyc < 10000) begin @(negedge clk); cyc++; end
    check(cyc == exp_cycles(alg, iters),
          $sformatf("%s ITER=%0d cycles %0d expected %0d", alg.name(), iters, cyc, exp_cycles(alg, iters)));
    for (int i = 0; i < MAXM; i++) sgot[i] = mk(0, 0);
    for (int i = 0; i < M; i++) begin
      sgot[i] = to_rc(which == 0 ? s0[i] : s1[i]);
      check(sgot[i] == sref[i], $sformatf("%s ITER=%0d s[%0d] got (%0d,%0d) exp (%0d,%0d)",
            alg.name(), iters, i, sgot[i].re, sgot[i].im, sref[i].re, sref[i].im));
    end
    r_end  = resid2(M, ra, rye, sgot);
    r_zero = resid2(M, ra, rye, '{default: mk(0, 0)});
    if (zero_case) begin
      for (int i = 0; i < M; i++) check(sgot[i] == mk(0, 0), "zero y_E must give s = 0");
    end else begin
      check(r_end < r_zero, $sformatf("%s residual %g not below %g", alg.name(), r_end, r_zero));
      if (which == 1 && alg == ALG_CR)
        check(r_end < 1e-3 * r_zero, $sformatf("CR ITER=M residual %g vs %g", r_end, r_zero));
    end
    @(negedge clk);
    check(!busy[which], "busy after done");
  endtask

  initial begin
    rmat_t ra;
    rvec_t rye;
    rc_t   h [NR][M];
    rc_t   y [NR];
    start[0] = 1'b0; start[1] = 1'b0; alg = ALG_CR; n_iter[0] = '0; n_iter[1] = '0;
    for (int i = 0; i < M; i++) begin
      y_e[i] = CZERO;
      for (int j = 0; j < M; j++) a[i][j] = CZERO;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 24; t++) begin
      bit zero_case;
      zero_case = (t % 8 == 5);
      for (int n = 0; n < NR; n++) begin
        for (int i = 0; i < M; i++) h[n][i] = rnd(20000);
        y[n] = zero_case ? mk(0, 0) : rnd(30000);
      end
      for (int i = 0; i < MAXM; i++) begin
        rye[i] = mk(0, 0);
        for (int j = 0; j < MAXM; j++) ra[i][j] = mk(0, 0);
      end
      for (int i = 0; i < M; i++) begin
        for (int n = 0; n < NR; n++) rye[i] = radd(rye[i], rmul(rconj(h[n][i]), y[n]));
        for (int j = 0; j < M; j++) begin
          ra[i][j] = (i == j) ? mk(3000, 0) : mk(0, 0);
          for (int n = 0; n < NR; n++) ra[i][j] = radd(ra[i][j], rmul(rconj(h[n][i]), h[n][j]));
        end
      end
      @(negedge clk);
      for (int i = 0; i < M; i++) begin
        y_e[i] = to_cx(rye[i]);
        for (int j = 0; j < M; j++) a[i][j] = to_cx(ra[i][j]);
      end
      alg = (t % 2 == 0) ? ALG_CR : ALG_MINRES;
      run(0, 3, 3, ra, rye, zero_case);
      run(0, 2, 2, ra, rye, zero_case);
      run(0, (t % 4 < 2) ? 0 : 6, 4, ra, rye, zero_case);   // 0 and >ITER select ITER
      run(1, 0, M, ra, rye, zero_case);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
