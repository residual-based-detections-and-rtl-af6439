// tb_matched_filter: streams random rows of H with the received samples y(n),
// with random gaps, and checks y_E = H^H y against the reference arithmetic,
// done one cycle after the N-th row, that extra rows are ignored and that
// start clears the accumulators between frames.
module tb_matched_filter;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int N = 10;
  localparam int M = 4;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start, in_valid;
  cplx_t h_row [M], y_n, y_e [M];
  logic  done;
  int    checks = 0, failures = 0;

  matched_filter #(.N(N), .M(M)) dut (.clk, .rst_n, .start, .in_valid, .h_row, .y_n, .y_e, .done);

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
    rc_t ye [M];
    start = 1'b0; in_valid = 1'b0; y_n = CZERO;
    for (int i = 0; i < M; i++) h_row[i] = CZERO;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 30; f++) begin
      for (int i = 0; i < M; i++) ye[i] = mk(0, 0);
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int n = 0; n < N; n++) begin
        rc_t yr;
        rc_t hr [M];
        while ($urandom_range(3, 0) == 0) begin
          in_valid = 1'b0; y_n = to_cx(rnd(40000));
          @(negedge clk);
        end
        yr = rnd(40000);
        for (int i = 0; i < M; i++) begin
          hr[i] = rnd(20000);
          ye[i] = radd(ye[i], rmul(rconj(hr[i]), yr));
          h_row[i] = to_cx(hr[i]);
        end
        in_valid = 1'b1; y_n = to_cx(yr);
        @(negedge clk);
        check(done == (n == N - 1), "done timing");
      end
      in_valid = (f % 2 == 0);   // extra row, ignored
      y_n = to_cx(rnd(40000));
      @(negedge clk);
      in_valid = 1'b0;
      check(done, "done must stay high");
      for (int i = 0; i < M; i++)
        check(to_rc(y_e[i]) == ye[i], $sformatf("y_E[%0d] frame %0d got (%0d,%0d) exp (%0d,%0d)",
                                                i, f, y_e[i].re, y_e[i].im, ye[i].re, ye[i].im));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
