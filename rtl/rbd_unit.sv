// rbd_unit: the unified residual-based detection (RBD) algorithm unit. It
// solves the MMSE system A s = y_E iteratively with either the minimal
// residual (MINRES) or the conjugate residual (CR) algorithm, chosen per run
// by alg, on one shared set of the paper's two basic modules.
//
// Resources (as in the paper's unified MINRES and CR figures):
//   * four iterative modules (y = x +/- a*b) holding r, e, p and s;
//   * two coefficient modules (c = m^H n / p^H q) giving alpha and beta;
//   * one matrix multiplier producing m = A r;
//   * two delay registers D holding r_{k-1} and m_{k-1} for beta.
// MINRES uses r, s, the alpha module and the multiplier; CR uses everything.
//
// CR (paper's Algorithm 3), s_0 = 0:
//   init : r = y_E, p = y_E, s = 0;  m = A r;  e = m
//   loop k = 1..ITER:
//     alpha = r^H m / e^H e
//     s = s + alpha p ;  r = r - alpha e ;  (D: r_{k-1} = r, m_{k-1} = m)
//     m = A r ; beta = r^H m / r_{k-1}^H m_{k-1}
//     p = r + beta p ;  e = m + beta e
//   The last pass stops after the s update: m, beta, p and e of the final
//   iteration are not needed for the output and are skipped.
// MINRES (paper's Algorithm 1), s_0 = 0, ITER passes (K = ITER-1 there):
//     r = y_E - A s      (r's iterative module, one column of A per cycle)
//     m = A r ; alpha = r^H m / m^H m ; s = s + alpha r
//
// ITER is the largest iteration count the unit supports; n_iter (sampled
// with start) selects 1..ITER iterations for the run, 0 or a larger value
// selects ITER. Below, ITER stands for the selected count.
//
// Interface and timing. start (one cycle, while !busy) samples alg; A and y_e
// must stay stable until done. done is a one-cycle pulse; s is then the
// estimate and holds until the next start. Cycles from the start cycle to the
// done cycle (both included), with M+2 cycles per multiplication A*r and 3
// per coefficient:
//   CR     : M + 5 + 4*ITER + (ITER-1)*(M+6)
//   MINRES : 3 + ITER*(2*M + 6)
// The module set, the data flow and the algorithms follow the paper; the
// schedule, the sequencer and the cycle counts are this design's choices,
// since the paper gives no timing.
module rbd_unit
  import rbd_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned ITER = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  alg_e  alg,
  input  logic [$clog2(ITER+1)-1:0] n_iter,
  input  cplx_t a [M][M],
  input  cplx_t y_e [M],
  output cplx_t s [M],
  output logic  busy,
  output logic  done
);

  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned KW = $clog2(ITER + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_RES, S_MV, S_MV_WAIT, S_ALPHA, S_ALPHA_WAIT,
    S_UPD, S_BETA, S_BETA_WAIT, S_UPD_PE, S_DONE
  } state_e;

  state_e        state, state_n;
  alg_e          alg_q;
  logic [CW-1:0] col;
  logic [KW-1:0] iter;
  logic          first_mv;  // CR: the multiplication producing m_0 = A r_0
  logic [KW-1:0] iters_q;   // iterations of this run, 1..ITER

  // Iterative-module controls and operands.
  it_op_e op_r, op_e, op_p, op_s;
  cplx_t  x_r [M], a_r [M], b_r [M], r [M];
  cplx_t  x_e [M], a_e [M], b_e [M], e [M];
  cplx_t  x_p [M], a_p [M], b_p [M], p [M];
  cplx_t  x_s [M], a_s [M], b_s [M];

  // Multiplier, coefficient modules and delay registers.
  logic   mv_start, mv_busy, mv_done;
  cplx_t  m [M];
  logic   al_start, al_valid, be_start, be_valid;
  cplx_t  alpha, beta;
  cplx_t  al_p [M], al_q [M];
  cplx_t  r_prev [M], m_prev [M];

  iterative_module #(.LANES(M)) u_it_r (.clk, .rst_n, .op(op_r), .x(x_r), .a(a_r), .b(b_r), .y(r));
  iterative_module #(.LANES(M)) u_it_e (.clk, .rst_n, .op(op_e), .x(x_e), .a(a_e), .b(b_e), .y(e));
  iterative_module #(.LANES(M)) u_it_p (.clk, .rst_n, .op(op_p), .x(x_p), .a(a_p), .b(b_p), .y(p));
  iterative_module #(.LANES(M)) u_it_s (.clk, .rst_n, .op(op_s), .x(x_s), .a(a_s), .b(b_s), .y(s));

  matvec_mul #(.M(M)) u_mv (
    .clk, .rst_n, .start(mv_start), .a, .v(r), .y(m), .busy(mv_busy), .done(mv_done)
  );

  // alpha: CR r^H m / e^H e ; MINRES r^H (A r) / (A r)^H (A r)
  coefficient_module #(.LANES(M)) u_alpha (
    .clk, .rst_n, .start(al_start), .m(r), .n(m), .p(al_p), .q(al_q), .c(alpha), .valid(al_valid)
  );

  // beta: r_k^H m_k / r_{k-1}^H m_{k-1}
  coefficient_module #(.LANES(M)) u_beta (
    .clk, .rst_n, .start(be_start), .m(r), .n(m), .p(r_prev), .q(m_prev), .c(beta), .valid(be_valid)
  );

  always_comb begin
    for (int i = 0; i < int'(M); i++) begin
      al_p[i] = (alg_q == ALG_CR) ? e[i] : m[i];
      al_q[i] = (alg_q == ALG_CR) ? e[i] : m[i];
    end
  end

  wire last_iter = (iter == iters_q - 1'b1);

  // Sequencer.
  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:       if (start) state_n = S_INIT;
      S_INIT:       state_n = (alg_q == ALG_CR) ? S_MV : S_RES;
      S_RES:        if (col == CW'(M - 1)) state_n = S_MV;
      S_MV:         state_n = S_MV_WAIT;
      S_MV_WAIT:    if (mv_done) state_n = (alg_q == ALG_CR && !first_mv) ? S_BETA : S_ALPHA;
      S_ALPHA:      state_n = S_ALPHA_WAIT;
      S_ALPHA_WAIT: if (al_valid) state_n = S_UPD;
      S_UPD:        state_n = last_iter ? S_DONE : ((alg_q == ALG_CR) ? S_MV : S_RES);
      S_BETA:       state_n = S_BETA_WAIT;
      S_BETA_WAIT:  if (be_valid) state_n = S_UPD_PE;
      S_UPD_PE:     state_n = S_ALPHA;
      S_DONE:       state_n = S_IDLE;
      default:      state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      alg_q    <= ALG_CR;
      iters_q  <= KW'(ITER);
      col      <= '0;
      iter     <= '0;
      first_mv <= 1'b0;
      for (int i = 0; i < int'(M); i++) begin
        r_prev[i] <= CZERO;
        m_prev[i] <= CZERO;
      end
    end else begin
      state <= state_n;
      if (state == S_IDLE && start) begin
        alg_q    <= alg;
        iters_q  <= (n_iter == '0 || n_iter > KW'(ITER)) ? KW'(ITER) : n_iter;
        iter     <= '0;
        col      <= '0;
        first_mv <= 1'b1;
      end
      if (state == S_RES) col <= (col == CW'(M - 1)) ? '0 : col + 1'b1;
      if (state == S_MV_WAIT && mv_done) first_mv <= 1'b0;
      if (state == S_UPD) begin
        iter   <= iter + 1'b1;
        r_prev <= r;   // delay D: r_{k-1}
        m_prev <= m;   // delay D: m_{k-1}
      end
    end
  end

  // Datapath controls.
  always_comb begin
    op_r = IT_HOLD; op_e = IT_HOLD; op_p = IT_HOLD; op_s = IT_HOLD;
    mv_start = (state == S_MV);
    al_start = (state == S_ALPHA);
    be_start = (state == S_BETA);
    done     = (state == S_DONE);
    busy     = (state != S_IDLE);
    for (int i = 0; i < int'(M); i++) begin
      x_r[i] = r[i]; a_r[i] = alpha; b_r[i] = e[i];
      x_e[i] = m[i]; a_e[i] = beta;  b_e[i] = e[i];
      x_p[i] = r[i]; a_p[i] = beta;  b_p[i] = p[i];
      x_s[i] = s[i]; a_s[i] = alpha; b_s[i] = (alg_q == ALG_CR) ? p[i] : r[i];
    end
    unique case (state)
      S_INIT: begin
        op_s = IT_INIT;
        for (int i = 0; i < int'(M); i++) x_s[i] = CZERO;
        if (alg_q == ALG_CR) begin
          op_r = IT_INIT;
          op_p = IT_INIT;
          for (int i = 0; i < int'(M); i++) begin
            x_r[i] = y_e[i];
            x_p[i] = y_e[i];
          end
        end
      end
      S_RES: begin  // r = y_E - A s, column col of A per cycle
        op_r = IT_MSC;
        for (int i = 0; i < int'(M); i++) begin
          x_r[i] = (col == '0) ? y_e[i] : r[i];
          a_r[i] = a[i][col];
          b_r[i] = s[col];
        end
      end
      S_MV_WAIT: begin  // CR: e_0 = m_0 = A r_0
        if (mv_done && alg_q == ALG_CR && first_mv) begin
          op_e = IT_INIT;
          for (int i = 0; i < int'(M); i++) x_e[i] = m[i];
        end
      end
      S_UPD: begin
        op_s = IT_MAC;                        // s = s + alpha p (CR) / alpha r (MINRES)
        if (alg_q == ALG_CR) op_r = IT_MSC;   // r = r - alpha e
      end
      S_UPD_PE: begin
        op_p = IT_MAC;                        // p = r + beta p
        op_e = IT_MAC;                        // e = m + beta e
      end
      default: ;
    endcase
  end

  // Handshake rules.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("rbd_unit: start while busy");
  a_mv_start: assert property (@(posedge clk) disable iff (!rst_n)
    mv_start |-> !mv_busy)
    else $error("rbd_unit: multiplier restarted while busy");

endmodule
