// tb_iterative_module: drives the iterative module (y = x +/- a*b per lane)
// with random operands and random operations (hold, init, add, subtract) and
// compares every lane after every cycle with the reference arithmetic. Also
// checks the one-cycle latency: y changes only on the edge after the op.
module tb_iterative_module;
  import rbd_pkg::*;
  import rbd_tb_pkg::*;

  localparam int L = 4;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  it_op_e op;
  cplx_t  x [L], a [L], b [L], y [L];
  rc_t    exp_y [L];
  int     checks = 0, failures = 0;

  iterative_module #(.LANES(L)) dut (.clk, .rst_n, .op, .x, .a, .b, .y);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = IT_HOLD;
    for (int i = 0; i < L; i++) begin
      x[i] = CZERO; a[i] = CZERO; b[i] = CZERO; exp_y[i] = mk(0, 0);
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      op = it_op_e'($urandom_range(3, 0));
      for (int i = 0; i < L; i++) begin
        rc_t rx, ra, rb;
        rx = rnd(1 << 18); ra = rnd(1 << 17); rb = rnd(1 << 17);
        x[i] = to_cx(rx); a[i] = to_cx(ra); b[i] = to_cx(rb);
        unique case (op)
          IT_INIT: exp_y[i] = rx;
          IT_MAC:  exp_y[i] = radd(rx, rmul(ra, rb));
          IT_MSC:  exp_y[i] = rsub(rx, rmul(ra, rb));
          default: ;
        endcase
      end
      // before the edge y must still hold the previous value
      @(posedge clk);
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (to_rc(y[i]) != exp_y[i]) begin
          failures++;
          if (failures < 10)
            $display("mismatch t=%0d lane=%0d op=%s got (%0d,%0d) exp (%0d,%0d)", t, i,
                     op.name(), y[i].re, y[i].im, exp_y[i].re, exp_y[i].im);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
