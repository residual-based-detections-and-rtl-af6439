// coefficient_module: the "coefficient module" of the unified RBD
// architecture, c = (m^H n) / (p^H q).
//
// Following the paper's block diagram, each of the two vector operands m and p
// passes through a Hermitian-conjugate stage and is multiplied with its partner
// (n, q); the upper product is the dividend and the lower one the divisor of a
// single divider. Here the two inner products are formed by LANES parallel
// complex multipliers and an adder tree each, so a whole coefficient takes two
// cycles:
//     cycle 0 : start = 1, vectors valid   -> inner products registered
//     cycle 1 : division                  -> c registered, valid = 1 (1 cycle)
// c holds its value until the next result. The coefficient (alpha, beta) is
// therefore kept in this module, as the paper's unified figures show.
// Lane parallelism, the two-stage pipeline and the divide-by-zero rule
// (c = 0, see rbd_pkg) are this design's choices.
module coefficient_module
  import rbd_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t m [LANES],
  input  cplx_t n [LANES],
  input  cplx_t p [LANES],
  input  cplx_t q [LANES],
  output cplx_t c,
  output logic  valid
);

  cplx_t num_d, den_d;  // combinational inner products
  cplx_t num_q, den_q;  // registered inner products
  logic  stage1;

  always_comb begin
    num_d = CZERO;
    den_d = CZERO;
    for (int i = 0; i < int'(LANES); i++) begin
      num_d = cadd(num_d, cmul(cconj(m[i]), n[i]));
      den_d = cadd(den_d, cmul(cconj(p[i]), q[i]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_q  <= CZERO;
      den_q  <= CZERO;
      stage1 <= 1'b0;
      c      <= CZERO;
      valid  <= 1'b0;
    end else begin
      stage1 <= start;
      valid  <= stage1;
      if (start) begin
        num_q <= num_d;
        den_q <= den_d;
      end
      if (stage1) begin
        c <= cdiv(num_q, den_q);
      end
    end
  end

endmodule
