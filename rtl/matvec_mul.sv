// matvec_mul: the matrix multiplier of the unified RBD architecture that forms
// A*r (MINRES) and m_k = A*r_k (CR) from the MMSE filtering matrix A.
//
// Column-serial: the input vector is captured when start is high; then, one
// column per cycle, every row lane i accumulates A(i,j)*v(j), so M complex
// multipliers produce the full product in M cycles:
//     edge 0          : start sampled, v captured
//     edges 1 .. M    : column 0 .. M-1 accumulated
//     after edge M    : y = A*v, done = 1 for one cycle; y holds afterwards.
// A must stay stable while busy is high. The paper only draws a multiplier
// fed by A and r; its internal schedule is this design's choice.
module matvec_mul
  import rbd_pkg::*;
#(
  parameter int unsigned M = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t a [M][M],
  input  cplx_t v [M],
  output cplx_t y [M],
  output logic  busy,
  output logic  done
);

  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;

  cplx_t          vq [M];
  logic [CW-1:0]  col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      col  <= '0;
      for (int i = 0; i < int'(M); i++) begin
        vq[i] <= CZERO;
        y[i]  <= CZERO;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        vq   <= v;
        col  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        for (int i = 0; i < int'(M); i++) begin
          y[i] <= cadd((col == '0) ? CZERO : y[i], cmul(a[i][col], vq[col]));
        end
        if (col == CW'(M - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
