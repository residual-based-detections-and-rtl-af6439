// iterative_module: the "iterative module" of the unified RBD architecture,
// a multiplier feeding an adder, y = x + a*b, applied to a whole vector.
//
// The module holds one complex vector of LANES elements in a register (the
// stored signal r, e, p or s of the algorithm). Each lane has its own complex
// multiplier and adder. On every cycle with op != IT_HOLD each lane computes
//     IT_INIT : y[i] <= x[i]                (initialisation input)
//     IT_MAC  : y[i] <= x[i] + a[i] * b[i]
//     IT_MSC  : y[i] <= x[i] - a[i] * b[i]
// The result is visible on y one cycle after the operation.
//
// The per-lane a/b inputs let the same module do both uses it has in the
// detector: a scalar-times-vector update (a[i] = alpha for all i, b = vector),
// one cycle per update, and a column-serial matrix-vector product
// (a = column j of A, b[i] = v[j], x = y), one column per cycle.
// The multiply-add structure and the formula are those of the paper; the lane
// parallelism, the subtract option (the "-" input in the MINRES residual
// module) and the explicit initialisation op are this design's choices.
module iterative_module
  import rbd_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  it_op_e op,
  input  cplx_t  x [LANES],
  input  cplx_t  a [LANES],
  input  cplx_t  b [LANES],
  output cplx_t  y [LANES]
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    cplx_t prod;
    assign prod = cmul(a[i], b[i]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        y[i] <= CZERO;
      end else begin
        unique case (op)
          IT_INIT: y[i] <= x[i];
          IT_MAC:  y[i] <= cadd(x[i], prod);
          IT_MSC:  y[i] <= csub(x[i], prod);
          default: ;
        endcase
      end
    end
  end

endmodule
