// gram_matrix: the "Gram matrix" module of the preprocessing unit. It forms
// the MMSE filtering matrix A = H^H H + sigma2 * I from a stream of channel
// rows, on an M x M lower-triangular systolic array of complex
// multiply-accumulate processing elements (PEs), as the paper prescribes.
//
// Data flow. Row n of H (the M gains of BS antenna n, h = H(n,:)) enters with
// in_valid = 1, one row per cycle, gaps allowed. PE(i,j), i >= j, accumulates
// conj(h_i) * h_j, so after all N rows it holds G(i,j) = (H^H H)(i,j).
// conj(h_i) enters row i from the left after an i-cycle skew and moves one
// PE to the right per cycle; h_j enters column j at the diagonal PE(j,j) after
// a 2j-cycle skew and moves one PE down per cycle. Both meet at PE(i,j) i+j
// cycles after the row was presented. A valid bit travels with the row data.
// The upper triangle is not computed: A(i,j) = conj(A(j,i)) for i < j.
//
// Interface and timing. start (one cycle, array idle) clears the array and
// loads sigma2 (real, same fixed-point format) into the diagonal
// accumulators, which adds the sigma2*I term. done is high after the 2M-th
// clock edge counted from (and including) the edge that samples the N-th row,
// and stays high until the next start; A is then
// valid and stable. Rows beyond the N-th are ignored.
// The systolic triangle and the MAC PEs follow the paper; the skew scheme,
// the sigma2 preload and the handshake are this design's choices.
module gram_matrix
  import rbd_pkg::*;
#(
  parameter int unsigned N = 128,
  parameter int unsigned M = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fix_t  sigma2,
  input  logic  in_valid,
  input  cplx_t h_row [M],
  output cplx_t a [M][M],
  output logic  done
);

  localparam int unsigned NW = $clog2(N + 1);

  // Skewed inputs at the array's edges.
  cplx_t rs_a [M];  // conj(h_i) entering row i
  logic  rs_v [M];  // its valid bit
  cplx_t cs_b [M];  // h_j entering column j at PE(j,j)

  // PE pipeline registers and accumulators (lower triangle used).
  cplx_t a_r   [M][M];
  cplx_t b_r   [M][M];
  logic  v_r   [M][M];
  cplx_t acc   [M][M];

  logic [NW-1:0] last_cnt;
  logic [NW-1:0] in_cnt;    // rows accepted at the input
  logic          accept;    // this row is one of the first N

  assign accept = in_valid && (in_cnt != NW'(N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       in_cnt <= '0;
    else if (start)   in_cnt <= '0;
    else if (accept)  in_cnt <= in_cnt + 1'b1;
  end

  for (genvar i = 0; i < M; i++) begin : g_skew
    delay_line #(.W($bits(cplx_t)), .D(i)) u_row_skew (
      .clk, .rst_n, .d(cconj(h_row[i])), .q(rs_a[i])
    );
    delay_line #(.W(1), .D(i)) u_row_vskew (
      .clk, .rst_n, .d(accept), .q(rs_v[i])
    );
    delay_line #(.W($bits(cplx_t)), .D(2 * i)) u_col_skew (
      .clk, .rst_n, .d(h_row[i]), .q(cs_b[i])
    );
  end

  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < M; j++) begin : g_col
      if (j <= i) begin : g_pe
        cplx_t a_in, b_in;
        logic  v_in;
        if (j == 0) begin : g_left
          assign a_in = rs_a[i];
          assign v_in = rs_v[i];
        end else begin : g_inner
          assign a_in = a_r[i][j-1];
          assign v_in = v_r[i][j-1];
        end
        if (i == j) begin : g_diag
          assign b_in = cs_b[j];
        end else begin : g_below
          assign b_in = b_r[i-1][j];
        end

        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            a_r[i][j] <= CZERO;
            b_r[i][j] <= CZERO;
            v_r[i][j] <= 1'b0;
            acc[i][j] <= CZERO;
          end else begin
            a_r[i][j] <= a_in;
            b_r[i][j] <= b_in;
            v_r[i][j] <= v_in;
            if (start) begin
              acc[i][j] <= (i == j) ? '{re: sigma2, im: '0} : CZERO;
            end else if (v_in) begin
              acc[i][j] <= cadd(acc[i][j], cmul(a_in, b_in));
            end
          end
        end

        assign a[i][j] = acc[i][j];
      end else begin : g_upper
        assign a_r[i][j] = CZERO;
        assign b_r[i][j] = CZERO;
        assign v_r[i][j] = 1'b0;
        assign acc[i][j] = CZERO;
        assign a[i][j]   = cconj(acc[j][i]);
      end
    end
  end

  // The last PE to see a row is PE(M-1, M-1); count its valid inputs.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_cnt <= '0;
    end else if (start) begin
      last_cnt <= '0;
    end else if (v_r[M-1][M-1] && last_cnt != NW'(N)) begin
      last_cnt <= last_cnt + 1'b1;
    end
  end

  assign done = (last_cnt == NW'(N));

endmodule
