// tb_matvec_mul: random A and v into the column-serial matrix multiplier;
// checks y = A v against the reference, done exactly M+1 cycles after start
// (one cycle to capture v, M columns), the busy flag, and that y holds after
// done even when the input vector changes.
module tb_matvec_mul;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int M = 5;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start;
  cplx_t a [M][M], v [M], y [M];
  logic  busy, done;
  int    checks = 0, failures = 0;

  matvec_mul #(.M(M)) dut (.clk, .rst_n, .start, .a, .v, .y, .busy, .done);

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
    rmat_t ra;
    rvec_t rv, ry;
    int    lat;
    start = 1'b0;
    for (int i = 0; i < M; i++) begin
      v[i] = CZERO;
      for (int j = 0; j < M; j++) a[i][j] = CZERO;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < MAXM; i++) begin
        rv[i] = (i < M) ? rnd(1 << 17) : mk(0, 0);
        for (int j = 0; j < MAXM; j++) ra[i][j] = (i < M && j < M) ? rnd(1 << 17) : mk(0, 0);
      end
      ry = rmatvec(M, ra, rv);
      @(negedge clk);
      for (int i = 0; i < M; i++) begin
        v[i] = to_cx(rv[i]);
        for (int j = 0; j < M; j++) a[i][j] = to_cx(ra[i][j]);
      end
      start = 1'b1;
      lat = 0;
      @(negedge clk);
      start = 1'b0;
      for (int i = 0; i < M; i++) v[i] = to_cx(rnd(999));  // v is captured at start
      lat = 1;
      check(busy == 1'b1, "busy after start");
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      check(lat == M + 1, $sformatf("latency %0d, expected %0d", lat, M + 1));
      for (int i = 0; i < M; i++)
        check(to_rc(y[i]) == ry[i], $sformatf("y[%0d] mismatch t=%0d", i, t));
      @(negedge clk);
      check(done == 1'b0 && busy == 1'b0, "done/busy after completion");
      for (int i = 0; i < M; i++) check(to_rc(y[i]) == ry[i], "y not held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
