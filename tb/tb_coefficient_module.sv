// tb_coefficient_module: random vectors m, n, p, q into the coefficient
// module; checks c = m^H n / p^H q against the reference arithmetic, the
// two-cycle latency from start to valid, the one-cycle valid pulse, that c
// holds between results, and the zero-divisor rule (c = 0).
module tb_coefficient_module;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int L = 4;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start;
  cplx_t m [L], n [L], p [L], q [L], c;
  logic  valid;
  int    checks = 0, failures = 0;

  coefficient_module #(.LANES(L)) dut (.clk, .rst_n, .start, .m, .n, .p, .q, .c, .valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
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
    rvec_t rm, rn, rp, rq;
    rc_t   expc;
    start = 1'b0;
    for (int i = 0; i < L; i++) begin m[i] = CZERO; n[i] = CZERO; p[i] = CZERO; q[i] = CZERO; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      bit zero_div;
      zero_div = (t % 25 == 7);
      for (int i = 0; i < MAXM; i++) begin rm[i] = mk(0,0); rn[i] = mk(0,0); rp[i] = mk(0,0); rq[i] = mk(0,0); end
      for (int i = 0; i < L; i++) begin
        rm[i] = rnd(1 << 17); rn[i] = rnd(1 << 17);
        rp[i] = zero_div ? mk(0, 0) : rnd(1 << 17);
        rq[i] = rnd(1 << 17);
      end
      expc = rdiv(rdot(L, rm, rn), rdot(L, rp, rq));
      @(negedge clk);
      for (int i = 0; i < L; i++) begin
        m[i] = to_cx(rm[i]); n[i] = to_cx(rn[i]); p[i] = to_cx(rp[i]); q[i] = to_cx(rq[i]);
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      // scramble inputs: the result must come from the sampled vectors
      for (int i = 0; i < L; i++) begin m[i] = to_cx(rnd(1000)); p[i] = to_cx(rnd(1000)); end
      check(valid == 1'b0, "valid too early");
      @(negedge clk);
      check(valid == 1'b1, "valid not at latency 2");
      check(to_rc(c) == expc, $sformatf("c mismatch t=%0d got (%0d,%0d) exp (%0d,%0d)",
                                        t, c.re, c.im, expc.re, expc.im));
      if (zero_div) check(c == CZERO, "zero divisor must give 0");
      @(negedge clk);
      check(valid == 1'b0, "valid longer than one cycle");
      check(to_rc(c) == expc, "c not held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
