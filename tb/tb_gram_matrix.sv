// tb_gram_matrix: streams random channel rows, with random gaps, into the
// systolic Gram-matrix array and checks A = H^H H + sigma2*I element by
// element (both triangles) against the reference arithmetic, the time from
// the last row to done (2M clock edges), that extra rows are ignored, and
// that a second frame after start starts from a clean array.
module tb_gram_matrix;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int N = 12;
  localparam int M = 4;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start, in_valid;
  fix_t  sigma2;
  cplx_t h_row [M];
  cplx_t a [M][M];
  logic  done;
  int    checks = 0, failures = 0;

  gram_matrix #(.N(N), .M(M)) dut (.clk, .rst_n, .start, .sigma2, .in_valid, .h_row, .a, .done);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    rc_t h [N][M];
    rc_t g [M][M];
    int  lat;
    start = 1'b0; in_valid = 1'b0; sigma2 = '0;
    for (int i = 0; i < M; i++) h_row[i] = CZERO;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 20; f++) begin
      int s2;
      s2 = $urandom_range(5000, 0);
      for (int n = 0; n < N; n++) for (int i = 0; i < M; i++) h[n][i] = rnd(20000);
      for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) begin
        g[i][j] = (i == j) ? mk(s2, 0) : mk(0, 0);
        for (int n = 0; n < N; n++) g[i][j] = radd(g[i][j], rmul(rconj(h[n][i]), h[n][j]));
      end
      @(negedge clk);
      start = 1'b1; sigma2 = fix_t'(s2);
      @(negedge clk);
      start = 1'b0;
      for (int n = 0; n < N; n++) begin
        while ($urandom_range(3, 0) == 0) begin
          in_valid = 1'b0;
          for (int i = 0; i < M; i++) h_row[i] = to_cx(rnd(30000));
          @(negedge clk);
        end
        in_valid = 1'b1;
        for (int i = 0; i < M; i++) h_row[i] = to_cx(h[n][i]);
        @(negedge clk);
        if (n < N - 1) check(!done, "done before all rows");
      end
      // an extra row must be ignored
      for (int i = 0; i < M; i++) h_row[i] = to_cx(rnd(30000));
      in_valid = (f % 2 == 1);
      lat = 1;
      while (!done && lat < 100) begin
        @(negedge clk);
        in_valid = 1'b0;
        lat++;
      end
      check(lat == 2 * M, $sformatf("done latency %0d", lat));
      for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) begin
        rc_t expv;
        expv = (i >= j) ? g[i][j] : rconj(g[j][i]);
        check(to_rc(a[i][j]) == expv,
              $sformatf("A(%0d,%0d) frame %0d got (%0d,%0d) exp (%0d,%0d)", i, j, f,
                        a[i][j].re, a[i][j].im, expv.re, expv.im));
      end
      repeat ($urandom_range(3, 0)) @(negedge clk);
      check(done, "done must stay high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
