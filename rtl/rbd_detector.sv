// rbd_detector: massive-MIMO uplink MMSE detector built on residual-based
// detection (RBD). It estimates the M user symbols s from the N received
// samples y = H s + n by solving A s = y_E, with A = H^H H + sigma2*I and
// y_E = H^H y, iteratively with MINRES or CR instead of inverting A.
//
// Structure (the paper's unified architecture):
//   preprocessing unit : gram_matrix (A, lower-triangular systolic array)
//                        and matched_filter (y_E), fed by the same row stream
//   algorithm unit     : rbd_unit (iterative modules, coefficient modules,
//                        the A*r multiplier and delay registers), MINRES or CR
//                        selected per frame by alg
//
// Interface and timing. A frame begins with start (one cycle, while !busy),
// which samples alg, n_iter (iterations, 1..ITER; 0 means ITER) and sigma2
// and clears the preprocessing unit. Then the N
// rows of H are presented, one per cycle with in_valid = 1 (gaps allowed):
// h_row = H(n,:) together with y_n = y(n). When both A and y_E are complete
// (after the 2M-th clock edge counted from the one that samples the last row)
// the algorithm unit starts by itself, in that same cycle.
// done pulses for one cycle when s_hat holds the estimate; s_hat keeps
// it until the next frame's result. The paper gives no interface or timing;
// these, and the number format of rbd_pkg, are this design's choices.
module rbd_detector
  import rbd_pkg::*;
#(
  parameter int unsigned N    = 128,
  parameter int unsigned M    = 16,
  parameter int unsigned ITER = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  alg_e  alg,
  input  logic [$clog2(ITER+1)-1:0] n_iter,
  input  fix_t  sigma2,
  input  logic  in_valid,
  input  cplx_t h_row [M],
  input  cplx_t y_n,
  output cplx_t s_hat [M],
  output logic  busy,
  output logic  done
);

  typedef enum logic [1:0] {T_IDLE, T_PRE, T_RUN} tstate_e;

  tstate_e state;
  alg_e    alg_q;
  logic [$clog2(ITER+1)-1:0] n_iter_q;
  logic    pre_start, unit_start, unit_busy, unit_done;
  logic    gram_done, mf_done;
  cplx_t   a_mat [M][M];
  cplx_t   y_e [M];

  assign pre_start  = (state == T_IDLE) && start;
  assign unit_start = (state == T_PRE) && gram_done && mf_done;

  gram_matrix #(.N(N), .M(M)) u_gram (
    .clk, .rst_n, .start(pre_start), .sigma2, .in_valid, .h_row,
    .a(a_mat), .done(gram_done)
  );

  matched_filter #(.N(N), .M(M)) u_mf (
    .clk, .rst_n, .start(pre_start), .in_valid, .h_row, .y_n,
    .y_e, .done(mf_done)
  );

  rbd_unit #(.M(M), .ITER(ITER)) u_unit (
    .clk, .rst_n, .start(unit_start), .alg(alg_q), .n_iter(n_iter_q), .a(a_mat), .y_e,
    .s(s_hat), .busy(unit_busy), .done(unit_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE;
      alg_q <= ALG_CR;
      n_iter_q <= '0;
    end else begin
      unique case (state)
        T_IDLE: if (start) begin
          state <= T_PRE;
          alg_q <= alg;
          n_iter_q <= n_iter;
        end
        T_PRE:  if (unit_start) state <= T_RUN;
        T_RUN:  if (unit_done) state <= T_IDLE;
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy = (state != T_IDLE);
  assign done = unit_done;

  // The algorithm unit is only started when idle.
  a_unit_idle: assert property (@(posedge clk) disable iff (!rst_n)
    unit_start |-> !unit_busy)
    else $error("rbd_detector: algorithm unit started while busy");

endmodule
